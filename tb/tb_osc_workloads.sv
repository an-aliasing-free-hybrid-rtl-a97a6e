// tb_osc_workloads: signal quality of one full-size oscillator (K = 1024).
// Generates the classic test waveforms and measures the signal-to-noise-and-
// distortion ratio (SINAD) of the oscillator output against a double-precision
// model of the same Fourier sum:
//   sine 1 kHz, amplitude 0.5 (-6 dBFS)    b_1 = 0.5
//   sine 20 Hz                            b_1 = 0.5
//   sawtooth 20 Hz, 1024 partials         b_k = 0.5 * (2/pi) / k
//   triangle 20 Hz, 1024 partials         a_k = 0.5 * (8/pi^2) / k^2, k odd
//   pulse 20 Hz, 1024 partials            a_k = 0.9 / 1024 (all equal)
// with n_k = k and fs = 96 kHz, so f/fs = round(f / 96000 * 2^32). The model
// uses the programmed (quantised) coefficients and the exact argument
// frac(l * (f/fs) * n_k); the measurement covers the first NS samples after
// reset. Pass thresholds: 120 dB, and 100 dB for the pulse, whose small
// amplitudes leave little signal power.
// For the 1 kHz sine the oscillator output also drives a PDM modulator, as it
// does through an identity mixer at the chip level. The pulse stream is
// compared with its own input: the difference (2^32 per pulse minus the offset-
// binary input, per clock) is passed through a second-order sinc decimator of
// length K (a triangular window of 2K clocks), read once per sample period,
// and its power is set against the signal power. Pass threshold: 60 dB.
module tb_osc_workloads;
  import bfo_pkg::*;
  localparam int unsigned K = 1024;
  localparam int unsigned NS = 960;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  osc_cfg_t cfg;
  logic [2:0] coef_we;
  logic [9:0] coef_waddr;
  logic [31:0] coef_wdata;
  logic sample_valid;
  logic [31:0] y;
  logic clip;
  int checks = 0, failures = 0;

  oscillator dut (.*);

  logic pdm;
  pdm_modulator pdm_i (.clk, .rst_n, .sample(y), .pdm);

  // PDM error after a sinc^2 decimator: I is the running sum of the error,
  // B the boxcar (I(n) - I(n-K)), T the sum of the last K boxcars.
  longint ring_i [K], ring_b [K];
  longint pi_acc, pt_acc;
  int unsigned pidx;
  logic [31:0] y_prev;
  logic pdm_on;
  real pdm_noise;

  always @(negedge clk) begin
    if (!rst_n || !pdm_on) begin
      pi_acc = 0; pt_acc = 0; pidx = 0;
      foreach (ring_i[j]) begin ring_i[j] = 0; ring_b[j] = 0; end
    end else begin
      automatic longint b;
      pi_acc += (pdm ? 64'sd4294967296 : 64'sd0) - longint'({~y_prev[31], y_prev[30:0]});
      b = pi_acc - ring_i[pidx];
      ring_i[pidx] = pi_acc;
      pt_acc += b - ring_b[pidx];
      ring_b[pidx] = b;
      pidx = (pidx + 1) % K;
    end
    y_prev = y;
  end

  always #5 clk = ~clk;

  logic [31:0] ca [K], cb [K], cn [K];

  function automatic logic [31:0] fx(real x);
    return 32'(longint'(x * 2.0**31 + ((x >= 0) ? 0.5 : -0.5)));
  endfunction

  function automatic real model(int l);
    real s = 0.0;
    logic [47:0] th;
    th = 48'(longint'(l) * longint'(cfg.delta));
    for (int k = 0; k < int'(K); k++) begin
      if (ca[k] != 0 || cb[k] != 0) begin
        // exact 48-bit fraction of theta * n_k
        automatic longint unsigned lo = longint'(th[31:0]) * longint'(cn[k]);
        automatic longint unsigned hi = (longint'(th[47:32]) * longint'(cn[k])) & 64'hffff;
        automatic real ph = real'((lo + (hi << 32)) & 64'hffff_ffff_ffff) / 2.0**48;
        s += real'(signed'(ca[k])) / 2.0**31 * $cos(2.0*PI*ph) + real'(signed'(cb[k])) / 2.0**31 * $sin(2.0*PI*ph);
      end
    end
    return s;
  endfunction

  task automatic run(input string name, input real f_hz, input real min_db,
                     input bit with_pdm = 1'b0);
    real ps, pe, e, g, sinad, pn, en;
    rst_n = 0;
    @(negedge clk);
    for (int k = 0; k < int'(K); k++)
      for (int fi = 0; fi < 3; fi++) begin
        coef_we = 3'b1 << fi; coef_waddr = 10'(k);
        coef_wdata = (fi == 0) ? ca[k] : (fi == 1) ? cb[k] : cn[k];
        @(negedge clk);
      end
    coef_we = '0;
    cfg = osc_cfg_default(K);
    cfg.delta = 32'(longint'(f_hz / 96000.0 * 2.0**32 + 0.5));
    @(negedge clk);
    rst_n = 1;
    pdm_on = with_pdm;
    ps = 0.0; pe = 0.0; pn = 0.0;
    for (int l = 0; l < int'(NS); l++) begin
      do @(posedge clk); while (!sample_valid);
      #1;
      e = model(l);
      g = real'(signed'(y)) / 2.0**31;
      ps += e * e;
      pe += (g - e) * (g - e);
      if (with_pdm && l >= 3) begin
        // bipolar full scale is twice the offset-binary scale
        en = 2.0 * real'(pt_acc) / (real'(K) * real'(K) * 2.0**32);
        pn += en * en;
      end
      checks++;
      if (clip) begin failures++; $display("FAIL %s clipped", name); end
    end
    sinad = 10.0 * $log10(ps / ((pe > 0.0) ? pe : 1e-300));
    $display("%-16s SINAD %6.1f dB over %0d samples", name, sinad, NS);
    checks++;
    if (sinad < min_db) begin failures++; $display("FAIL %s SINAD below %0.1f dB", name, min_db); end
    if (with_pdm) begin
      sinad = 10.0 * $log10(ps / ((pn > 0.0) ? pn : 1e-300));
      $display("%-16s PDM SINAD after sinc^2 decimator %6.1f dB", name, sinad);
      checks++;
      if (sinad < 60.0) begin failures++; $display("FAIL %s PDM SINAD below 60 dB", name); end
    end
    pdm_on = 1'b0;
  endtask

  initial begin
    coef_we = '0; coef_waddr = '0; coef_wdata = '0;
    pdm_on = 1'b0;
    cfg = osc_cfg_default(K);
    for (int k = 0; k < int'(K); k++) begin ca[k] = 0; cb[k] = 0; cn[k] = 32'(k + 1) << 16; end
    cb[0] = fx(0.5);
    run("sine 1 kHz", 1000.0, 120.0, 1'b1);
    run("sine 20 Hz", 20.0, 120.0);
    for (int k = 0; k < int'(K); k++) cb[k] = fx(0.5 * (2.0 / PI) / real'(k + 1));
    run("sawtooth 20 Hz", 20.0, 120.0);
    for (int k = 0; k < int'(K); k++) begin
      cb[k] = 0;
      ca[k] = ((k % 2) == 0) ? fx(0.5 * (8.0 / (PI * PI)) / real'((k + 1) * (k + 1))) : 32'd0;
    end
    run("triangle 20 Hz", 20.0, 120.0);
    for (int k = 0; k < int'(K); k++) ca[k] = fx(0.9 / 1024.0);
    run("pulse 20 Hz", 20.0, 100.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5 * (NS + 5) * K + 5 * 4 * K) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
