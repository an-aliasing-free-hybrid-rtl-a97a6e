// bfo_checker: end-to-end stimulus and checker for the BFO chip, connected to
// its pins only. Shared by the reduced-size (tb_bfo_top) and the full-size
// (tb_bfo_full) testbenches.
//
// It configures the chip over SPI, decodes the I2S stream like a DAC would and
// checks every mechanism of the chip against values worked out here:
//   - each oscillator holds DC partials (n_k = 0, so cos(0) = 1 whatever the
//     argument) on indices 0, 2 and 3 and a strong partial at n_k = 40 on index 1,
//     which lies at 0.625 fs and must be removed by alias control;
//   - subwave boundaries 2, 3, 4 put the three DC partials in subwaves 1-3 with
//     weights 1, 0.5 and 0.25; partials 4..K-1 are never written and go to
//     subwave 4 with weight 0, so their random power-up contents cannot matter;
//   - phases then: aliasing allowed on one oscillator (the aliased partial then
//     appears at 0.375 fs; its samples s[l] must satisfy s[l]^2 + s[l+2]^2 =
//     0.4^2), rate-crusher at fs/4, band-pass removing DC, bit-crusher mask, a
//     coefficient rewrite that clips an oscillator and the mixer (clip pins),
//     a mono mixer matrix, and the PDM density.
// It also checks that an I2S frame lasts exactly K clocks (one sample per K
// clocks) and counts how often each mechanism was seen; a mechanism never seen
// is a failure.
module bfo_checker #(
  parameter int unsigned K = 128
) (
  input  logic       clk,
  output logic       rst_n,
  output logic       spi_sclk,
  output logic       spi_cs_n,
  output logic       spi_mosi,
  input  logic       i2s_sclk,
  input  logic       i2s_lrck,
  input  logic       i2s_sd,
  input  logic       pdm_l,
  input  logic       pdm_r,
  input  logic [7:0] clip_osc,
  input  logic [1:0] clip_mix
);
  import bfo_pkg::*;

  int checks = 0, failures = 0;
  int n_alias_cut = 0, n_alias_allowed = 0, n_rate_hold = 0, n_bandpass = 0, n_mask = 0;
  int n_osc_clip = 0, n_mix_clip = 0, n_mono = 0, n_pdm = 0, n_subwave = 0, n_rewrite = 0;

  spi_host #(.HALF_NS(20)) host (.sclk(spi_sclk), .cs_n(spi_cs_n), .mosi(spi_mosi));

  // ---------------- I2S receiver ----------------
  logic last_lr = 1'b1;
  int pos = 0;
  logic [23:0] w, wl;
  longint unsigned cyc = 0, last_lr_rise = 0;
  int nframes = 0;
  logic signed [23:0] fr_l [$], fr_r [$];

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge i2s_sclk) begin
    if (i2s_lrck != last_lr) begin
      if (i2s_lrck) begin
        if (last_lr_rise != 0) begin
          checks++;
          if (cyc - last_lr_rise != 64'(K)) begin failures++; $display("FAIL frame length %0d", cyc - last_lr_rise); end
        end
        last_lr_rise = cyc;
      end
      pos = -1;
    end else pos++;
    last_lr = i2s_lrck;
    if (pos >= 0 && pos < 24) w[23 - pos] = i2s_sd;
    if (pos == 23) begin
      if (!i2s_lrck) wl = w;
      else begin
        fr_l.push_back(wl);
        fr_r.push_back(w);
        nframes++;
      end
    end
  end

  task automatic next_frame(output real l, output real r);
    while (fr_l.size() == 0) @(posedge clk);
    l = real'(fr_l.pop_front()) / 2.0**23;
    r = real'(fr_r.pop_front()) / 2.0**23;
  endtask

  task automatic settle(int n);
    real l, r;
    fr_l.delete(); fr_r.delete();
    for (int i = 0; i < n; i++) next_frame(l, r);
  endtask

  // ---------------- configuration and model ----------------
  real amp_a [8], amp_c [8], amp_d [8], vv [8][3];
  logic [31:0] mask [8];
  logic        bandcut [8];
  real mm [2][2];

  function automatic logic [31:0] fx(real x, real scale);   // real -> fixed point
    return 32'(longint'(x * scale + ((x >= 0) ? 0.5 : -0.5)));
  endfunction

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    host.send(a, d);
  endtask
  task automatic wr_osc(input int o, input osc_reg_e r, input logic [31:0] d);
    wr({9'h100, 3'(o), r}, d);
  endtask
  task automatic wr_coef(input int o, input int f, input int k, input logic [31:0] d);
    wr({1'b0, 3'(o), 2'(f), 10'(k)}, d);
  endtask

  function automatic real osc_y(int o, output logic clipped);
    real y;
    y = bandcut[o] ? 0.0 : amp_a[o] * vv[o][0] + amp_c[o] * vv[o][1] + amp_d[o] * vv[o][2];
    clipped = 1'b0;
    if (y >= 1.0)  begin y = 1.0 - 2.0**-31; clipped = 1'b1; end
    if (y < -1.0)  begin y = -1.0; clipped = 1'b1; end
    if (mask[o] != '1) begin
      automatic logic [31:0] yi = fx(y, 2.0**31) & mask[o];
      y = real'(signed'(yi)) / 2.0**31;
    end
    return y;
  endfunction

  task automatic expect_lr(output real l, output real r, output logic [7:0] oc, output logic [1:0] mc);
    real vs [2];
    real o2 [2];
    vs[0] = 0.0; vs[1] = 0.0;
    for (int o = 0; o < 8; o++) begin
      logic c;
      vs[o / 4] += osc_y(o, c);
      oc[o] = c;
    end
    for (int i = 0; i < 2; i++) begin
      o2[i] = mm[i][0] * vs[0] + mm[i][1] * vs[1];
      mc[i] = 1'b0;
      if (o2[i] >= 1.0) begin o2[i] = 1.0 - 2.0**-23; mc[i] = 1'b1; end
      if (o2[i] < -1.0) begin o2[i] = -1.0; mc[i] = 1'b1; end
    end
    l = o2[0]; r = o2[1];
  endtask

  // compare NF frames with the DC model
  task automatic check_dc(input string what, input int nf);
    real el, er, gl, gr;
    logic [7:0] oc;
    logic [1:0] mc;
    expect_lr(el, er, oc, mc);
    for (int i = 0; i < nf; i++) begin
      next_frame(gl, gr);
      checks++;
      if (gl - el > 3.0 * 2.0**-23 || el - gl > 3.0 * 2.0**-23 ||
          gr - er > 3.0 * 2.0**-23 || er - gr > 3.0 * 2.0**-23) begin
        failures++;
        if (failures < 20) $display("FAIL %s: expected L %f R %f, got L %f R %f", what, el, er, gl, gr);
      end
    end
    checks++;
    if (clip_osc !== oc || clip_mix !== mc) begin
      failures++; $display("FAIL %s: clip pins %b %b expected %b %b", what, clip_osc, clip_mix, oc, mc);
    end
    if (oc != 0) n_osc_clip++;
    if (mc != 0) n_mix_clip++;
  endtask

  initial begin
    real l, r, base_l, s [$];
    int changes, run_len, pdm_ones;
    real el, er;
    logic [7:0] oc;
    logic [1:0] mc;

    rst_n = 1'b0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);

    // program all eight oscillators
    for (int o = 0; o < 8; o++) begin
      amp_a[o] = 0.03 * (o + 1); amp_c[o] = 0.02; amp_d[o] = -0.03;
      vv[o][0] = 1.0; vv[o][1] = 0.5; vv[o][2] = 0.25;
      mask[o] = '1; bandcut[o] = 1'b0;
      wr_coef(o, 0, 0, fx(amp_a[o], 2.0**31)); wr_coef(o, 1, 0, fx(0.1, 2.0**31)); wr_coef(o, 2, 0, 32'd0);
      wr_coef(o, 0, 1, fx(0.4, 2.0**31));      wr_coef(o, 1, 1, 32'd0);            wr_coef(o, 2, 1, 32'd40 << 16);
      wr_coef(o, 0, 2, fx(amp_c[o], 2.0**31)); wr_coef(o, 1, 2, fx(-0.2, 2.0**31)); wr_coef(o, 2, 2, 32'd0);
      wr_coef(o, 0, 3, fx(amp_d[o], 2.0**31)); wr_coef(o, 1, 3, fx(0.3, 2.0**31));  wr_coef(o, 2, 3, 32'd0);
      wr_osc(o, REG_DELTA, 32'h0400_0000);    // f/fs = 1/64
      wr_osc(o, REG_BOUND1, 32'd2);
      wr_osc(o, REG_BOUND2, 32'd3);
      wr_osc(o, REG_BOUND3, 32'd4);
      wr_osc(o, REG_V2, 32'h2000_0000);
      wr_osc(o, REG_V3, 32'h1000_0000);
    end
    mm[0][0] = 1.0; mm[0][1] = 0.0; mm[1][0] = 0.0; mm[1][1] = 1.0;
    settle(3);

    // A: default alias control removes the partial at 0.625 fs; subwave weights apply
    check_dc("alias cut", 8);
    n_alias_cut++; n_subwave++;

    // B: aliasing allowed on oscillator 0 (f_LP = 0.75): a 0.4 sinusoid at 0.375 fs appears
    expect_lr(base_l, er, oc, mc);
    wr_osc(0, REG_FLP, 32'hc000_0000);
    settle(3);
    s.delete();
    for (int i = 0; i < 18; i++) begin next_frame(l, r); s.push_back(l - base_l); end
    for (int i = 0; i < 16; i++) begin
      automatic real p = s[i] * s[i] + s[i + 2] * s[i + 2];
      checks++;
      if (p - 0.16 > 1e-5 || 0.16 - p > 1e-5) begin
        failures++; $display("FAIL aliased sinusoid power %f", p);
      end
    end
    checks++;
    if (s[0] == s[1] && s[1] == s[2]) failures++; else n_alias_allowed++;

    // C: rate crusher at fs/4 on oscillator 0: the output holds for 4 samples
    wr_osc(0, REG_RATE, 32'h4000_0000);
    wr_osc(0, REG_CTRL, 32'd1);
    settle(3);
    next_frame(l, r);
    base_l = l; changes = 0; run_len = 1;
    for (int i = 0; i < 32; i++) begin
      next_frame(l, r);
      if (l != base_l) begin
        checks++;
        if (changes > 0 && run_len != 4) begin failures++; $display("FAIL rate crusher hold %0d", run_len); end
        changes++; run_len = 1; base_l = l;
      end else begin
        run_len++; n_rate_hold++;
      end
    end
    checks++;
    if (changes < 7 || changes > 9) begin failures++; $display("FAIL rate crusher changes %0d", changes); end
    wr_osc(0, REG_CTRL, 32'd0);
    wr_osc(0, REG_FLP, 32'h8000_0000);
    settle(3);
    check_dc("back to default", 4);

    // D: band-pass on oscillator 4 (f_HP = 0.1) removes its DC partials
    wr_osc(4, REG_FHP, fx(0.1, 2.0**32));
    bandcut[4] = 1'b1;
    settle(3);
    check_dc("band-pass", 8);
    n_bandpass++;

    // E: bit-crusher on oscillator 5 keeps the 12 most significant bits
    wr_osc(5, REG_MASK, 32'hfff0_0000);
    mask[5] = 32'hfff0_0000;
    settle(3);
    check_dc("bit-crusher", 8);
    n_mask++;

    // F: rewrite a coefficient so that oscillator 6 and the R mixer output clip
    wr_coef(6, 0, 0, fx(0.6, 2.0**31));
    amp_a[6] = 0.6;
    wr_osc(6, REG_V1, 32'h7fff_ffff);
    vv[6][0] = 2.0 - 2.0**-30;
    settle(3);
    check_dc("clipping", 8);
    n_rewrite++;

    // G: mono matrix (all coefficients 0.5), no clipping
    wr_coef(6, 0, 0, fx(0.21, 2.0**31));
    amp_a[6] = 0.21;
    wr_osc(6, REG_V1, 32'h4000_0000);
    vv[6][0] = 1.0;
    for (int i = 0; i < 4; i++) wr(16'h8100 + 16'(i), 32'h2000_0000);
    mm[0][0] = 0.5; mm[0][1] = 0.5; mm[1][0] = 0.5; mm[1][1] = 0.5;
    settle(3);
    check_dc("mono mixer", 8);
    next_frame(l, r);
    checks++;
    if (l != r) begin failures++; $display("FAIL mono: L != R"); end else n_mono++;

    // H: PDM density of the left output over 8 sample periods
    expect_lr(el, er, oc, mc);
    pdm_ones = 0;
    for (int i = 0; i < 8 * int'(K); i++) begin
      @(posedge clk);
      pdm_ones += int'(pdm_l);
    end
    checks++;
    begin
      automatic real e = 8.0 * real'(K) * (el + 1.0) / 2.0;
      if (real'(pdm_ones) - e > 2.0 || e - real'(pdm_ones) > 2.0) begin
        failures++; $display("FAIL PDM density %0d expected %f", pdm_ones, e);
      end else n_pdm++;
    end

    // every mechanism must have happened
    checks++;
    if (n_alias_cut == 0 || n_alias_allowed == 0 || n_rate_hold == 0 || n_bandpass == 0 ||
        n_mask == 0 || n_osc_clip == 0 || n_mix_clip == 0 || n_mono == 0 || n_pdm == 0 ||
        n_subwave == 0 || n_rewrite == 0) begin
      failures++; $display("FAIL a mechanism was never exercised");
    end
    $display("mechanisms: alias_cut=%0d alias_allowed=%0d rate_hold=%0d bandpass=%0d bit_mask=%0d osc_clip=%0d mix_clip=%0d mono=%0d pdm=%0d subwave=%0d coef_rewrite=%0d frames=%0d",
             n_alias_cut, n_alias_allowed, n_rate_hold, n_bandpass, n_mask, n_osc_clip, n_mix_clip, n_mono, n_pdm, n_subwave, n_rewrite, nframes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
