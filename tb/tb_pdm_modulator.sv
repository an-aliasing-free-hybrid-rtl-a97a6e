// tb_pdm_modulator: self-checking testbench of the first-order sigma-delta.
// For several constant inputs, the number of ones in 4096 output bits must
// equal 4096 * (sample + 2^31) / 2^32 to within one; for a first-order
// modulator the error of any such count is bounded by one.
module tb_pdm_modulator;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] sample;
  logic pdm;
  int checks = 0, failures = 0;
  localparam int unsigned N = 4096;

  pdm_modulator dut (.*);

  always #5 clk = ~clk;

  task automatic run(input logic [31:0] s);
    int ones;
    real e;
    sample = s;
    @(negedge clk);           // first bit of this input
    ones = 0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      ones += int'(pdm);
    end
    e = real'(N) * (real'(signed'(s)) + 2.0**31) / 2.0**32;
    checks++;
    if (real'(ones) - e > 1.01 || e - real'(ones) > 1.01) begin
      failures++; $display("FAIL s=%h ones=%0d expected %f", s, ones, e);
    end
  endtask

  initial begin
    sample = '0;
    @(negedge clk); rst_n = 1;
    run(32'h0000_0000);
    run(32'h4000_0000);
    run(32'hc000_0000);
    run(32'h7fff_ffff);
    run(32'h8000_0000);
    for (int i = 0; i < 20; i++) run($urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30 * (N + 4)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
