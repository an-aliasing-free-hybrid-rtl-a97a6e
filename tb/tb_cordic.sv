// tb_cordic: self-checking testbench of the CORDIC.
// Streams random (a, b, phase) triples, one per clock, plus the four quadrant
// boundaries, and compares each partial with a*cos(2 pi phase) + b*sin(2 pi phase)
// computed in double precision. The error must stay below 2^-24 (24 fraction
// bits). Also checks the latency of M + 2 clocks via the tag and valid timing.
module tb_cordic;
  import bfo_pkg::*;

  localparam int unsigned M = 26;
  localparam int unsigned N = 20000;
  localparam real PI = 3.14159265358979323846;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        in_valid;
  logic [31:0] a, b, phase;
  logic [15:0] tag_in, tag_out;
  logic        out_valid;
  logic [PART_W-1:0] partial;

  int checks = 0, failures = 0;
  int unsigned cyc = 0;

  cordic #(.M(M), .TAG_W(16)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  logic [31:0] va [N], vb [N], vp [N];
  int unsigned t_in [N];
  real maxerr = 0.0;

  initial begin
    for (int i = 0; i < N; i++) begin
      va[i] = $urandom;
      vb[i] = $urandom;
      vp[i] = $urandom;
    end
    // corner cases: full-scale amplitudes and quadrant edges
    va[0] = 32'h7fff_ffff; vb[0] = 32'h0;         vp[0] = 32'h0;
    va[1] = 32'h8000_0000; vb[1] = 32'h8000_0000; vp[1] = 32'h4000_0000;
    va[2] = 32'h7fff_ffff; vb[2] = 32'h7fff_ffff; vp[2] = 32'h2000_0000;
    va[3] = 32'h1234_5678; vb[3] = 32'h8765_4321; vp[3] = 32'hffff_ffff;
    va[4] = 32'h4000_0000; vb[4] = 32'h0;         vp[4] = 32'hc000_0000;
  end

  initial begin
    in_valid = 1'b0; a = '0; b = '0; phase = '0; tag_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      in_valid <= 1'b1; a <= va[i]; b <= vb[i]; phase <= vp[i]; tag_in <= 16'(i);
      t_in[i] = cyc;
      @(posedge clk);
    end
    in_valid <= 1'b0;
  end

  int nout = 0;
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      automatic int i = int'(tag_out);
      automatic real ar = real'(signed'(va[i])) / 2.0**31;
      automatic real br = real'(signed'(vb[i])) / 2.0**31;
      automatic real ph = real'(vp[i]) / 2.0**32;
      automatic real exp_v = ar * $cos(2.0*PI*ph) + br * $sin(2.0*PI*ph);
      automatic real got = real'(signed'(partial)) / 2.0**31;
      automatic real err = (got > exp_v) ? got - exp_v : exp_v - got;
      if (err > maxerr) maxerr = err;
      checks++;
      if (i != nout || err > 2.0**-24) begin
        failures++;
        $display("FAIL cordic i=%0d exp=%f got=%f err=%e", i, exp_v, got, err);
      end
      checks++;
      if (cyc - t_in[i] != M + 3) begin  // M + 2 register stages, seen one edge later
        failures++;
        $display("FAIL latency %0d", cyc - t_in[i]);
      end
      nout++;
      if (nout == N) begin
        checks++;
        $display("max error %e (2^-24 = %e)", maxerr, 2.0**-24);
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    repeat (N + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
