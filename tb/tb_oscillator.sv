// tb_oscillator: self-checking testbench of one oscillator (K = 16 partials).
// For each scenario the register file is filled through its write port while
// reset is held, the configuration is set, and the first NS samples after reset
// are compared with a double-precision model of
//   x_i[l] = sum over k in subwave i with f_HP <= (f/fs) n_k < f_LP of
//            a_k cos(2 pi theta_k) + b_k sin(2 pi theta_k),
//   theta_k = frac(theta n_k), theta = l f/fs mod 2^16,
//   y = clip(sum v_i x_i), then bit mask and rate crusher.
// The tolerance is 2^-20 of full scale. Scenarios: harmonic series below
// Nyquist, partials cut by alias control, inharmonic partials with a band-pass,
// four subwaves, bit- and rate-crusher, and clipping. Also checks that a sample
// comes every K clocks and the first one K + 32 clocks after reset.
module tb_oscillator;
  import bfo_pkg::*;
  localparam int unsigned K = 16;
  localparam int unsigned AW = 4;
  localparam int unsigned NS = 24;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  osc_cfg_t cfg;
  logic [2:0] coef_we;
  logic [AW-1:0] coef_waddr;
  logic [31:0] coef_wdata;
  logic sample_valid;
  logic [31:0] y;
  logic clip;
  int checks = 0, failures = 0;
  int n_alias_cut = 0, n_clip = 0;

  oscillator #(.K(K)) dut (.*);

  always #5 clk = ~clk;

  logic [31:0] ca [K], cb [K], cn [K];

  function automatic logic [31:0] frac_mul(logic [47:0] th, logic [31:0] n);
    longint unsigned lo, hi;
    lo = longint'(th[31:0]) * longint'(n);
    hi = (longint'(th[47:32]) * longint'(n)) & 64'hffff;
    return 32'(((lo + (hi << 32)) & 64'hffff_ffff_ffff) >> 16);
  endfunction

  // expected y for sample l (before the rate crusher), in LSBs; sets clipped
  function automatic real model(int l, output logic clipped);
    real xs [NSUB];
    real s;
    logic [47:0] th;
    th = 48'(longint'(l) * longint'(cfg.delta));
    for (int i = 0; i < NSUB; i++) xs[i] = 0.0;
    for (int k = 0; k < int'(K); k++) begin
      automatic longint unsigned fk = longint'(cfg.delta) * longint'(cn[k]);
      if (fk >= (longint'(cfg.f_hp) << 16) && fk < (longint'(cfg.f_lp) << 16)) begin
        automatic real ph = real'(frac_mul(th, cn[k])) / 2.0**32;
        automatic int sb = (k < int'(cfg.bound[0])) ? 0 : (k < int'(cfg.bound[1])) ? 1 : (k < int'(cfg.bound[2])) ? 2 : 3;
        xs[sb] += real'(signed'(ca[k])) * $cos(2.0*PI*ph) + real'(signed'(cb[k])) * $sin(2.0*PI*ph);
      end else if (l == 0) n_alias_cut++;
    end
    s = 0.0;
    for (int i = 0; i < NSUB; i++) s += xs[i] * real'(signed'(cfg.v[i])) / 2.0**30;
    clipped = 1'b0;
    if (s > 2.0**31 - 1.0) begin s = 2.0**31 - 1.0; clipped = 1'b1; end
    if (s < -(2.0**31))    begin s = -(2.0**31);    clipped = 1'b1; end
    return s;
  endfunction

  task automatic program_coefs();
    @(negedge clk);
    for (int k = 0; k < int'(K); k++)
      for (int f = 0; f < 3; f++) begin
        coef_we = 3'b1 << f; coef_waddr = AW'(k);
        coef_wdata = (f == 0) ? ca[k] : (f == 1) ? cb[k] : cn[k];
        @(negedge clk);
      end
    coef_we = '0;
  endtask

  task automatic run(input string name);
    longint unsigned t0, tprev;
    real e, held;
    logic cl;
    logic [31:0] ph;
    rst_n = 0;
    program_coefs();
    @(negedge clk);
    rst_n = 1;
    t0 = 0;
    tprev = 0;
    ph = 0;
    held = 0.0;
    for (int l = 0; l < int'(NS); l++) begin
      int waitc = 0;
      do begin @(posedge clk); #1; waitc++; end while (!sample_valid);
      checks++;
      if (l == 0 && waitc != int'(K) + 32) begin failures++; $display("FAIL %s first-sample latency %0d", name, waitc); end
      if (l > 0 && waitc != int'(K)) begin failures++; $display("FAIL %s sample period %0d", name, waitc); end
      e = model(l, cl);
      if (cl) n_clip++;
      // bit-crusher on the clipped, rounded value; rate crusher hold
      begin
        automatic logic [31:0] yi = cl ? ((e > 0) ? 32'h7fff_ffff : 32'h8000_0000) : 32'(longint'(e));
        automatic logic [32:0] pn = 33'(ph) + 33'(cfg.rate);
        automatic real em = real'(signed'(yi & cfg.mask));
        ph = pn[31:0];
        if (!cfg.rate_en || pn[32]) held = em;
        // masking can move the value by up to the masked weight; compare masked model
        e = held;
      end
      checks++;
      if (real'(signed'(y)) - e > 2048.0 || e - real'(signed'(y)) > 2048.0 || clip !== cl) begin
        failures++;
        if (failures < 20) $display("FAIL %s l=%0d exp %f got %0d clip %b/%b", name, l, e, signed'(y), cl, clip);
      end
    end
  endtask

  initial begin
    coef_we = '0; coef_waddr = '0; coef_wdata = '0;
    cfg = osc_cfg_default(K);
    // 1: harmonic series (sawtooth-like) at f/fs = 1/1000, all below Nyquist
    for (int k = 0; k < int'(K); k++) begin
      ca[k] = 0; cb[k] = 32'(int'(2.0**31 * 0.5 / (k + 1) / 2.0)); cn[k] = 32'(k + 1) << 16;
    end
    cfg.delta = 32'(longint'(2.0**32 / 1000.0));
    run("harmonic");
    // 2: same series at f/fs = 0.05: partials 10..16 are at or above fs/2 and are cut
    cfg.delta = 32'(longint'(2.0**32 * 0.05));
    run("alias");
    // 3: inharmonic multipliers with random a, b and a band-pass [0.1, 0.3)
    for (int k = 0; k < int'(K); k++) begin
      ca[k] = 32'(signed'($urandom) >>> 5); cb[k] = 32'(signed'($urandom) >>> 5);
      cn[k] = $urandom_range(32'h0010_0000);   // n_k up to 16.0 with 16 fraction bits
    end
    cfg.delta = 32'h0400_0000;  // 1/64
    cfg.f_hp = 32'h1999_999a; cfg.f_lp = 32'h4ccc_cccd;
    run("bandpass");
    // 4: subwave mixing, four groups of four partials with different weights
    cfg.f_hp = 0; cfg.f_lp = HALF_U032;
    cfg.bound = {16'd12, 16'd8, 16'd4};
    cfg.v = {32'hf000_0000, 32'h2000_0000, 32'h1000_0000, 32'h4000_0000};
    run("subwaves");
    // 5: bit-crusher (keep 8 MSBs) and rate-crusher at fs/3
    cfg.bound = {3{16'(K)}}; cfg.v = {32'd0, 32'd0, 32'd0, ONE_S130};
    cfg.mask = 32'hff00_0000; cfg.rate = 32'h5555_5555; cfg.rate_en = 1;
    run("crushers");
    // 6: clipping: 16 in-phase cosines of amplitude 0.5
    cfg.mask = '1; cfg.rate_en = 0;
    for (int k = 0; k < int'(K); k++) begin ca[k] = 32'h4000_0000; cb[k] = 0; cn[k] = 32'(k + 1) << 16; end
    cfg.delta = 32'h0010_0000;
    run("clip");
    checks++; if (n_alias_cut == 0 || n_clip == 0) begin failures++; $display("FAIL mechanisms not exercised"); end
    $display("partials cut by alias control (first samples): %0d, clipped samples: %0d", n_alias_cut, n_clip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6 * (NS + 4) * K + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
