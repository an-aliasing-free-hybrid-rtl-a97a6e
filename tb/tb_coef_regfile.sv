// tb_coef_regfile: self-checking testbench of the coefficient register file.
// Fills all K words field by field with random data, reads every word back and
// checks the one-clock read latency, then rewrites single fields and checks
// that the other two fields of the word are untouched and that a word read in
// the clock it is written returns its old value.
module tb_coef_regfile;
  localparam int unsigned K = 1024;
  localparam int unsigned AW = 10;

  logic          clk = 1'b0;
  logic [2:0]    we;
  logic [AW-1:0] waddr, raddr;
  logic [31:0]   wdata;
  logic [95:0]   rdata;
  int checks = 0, failures = 0;

  logic [95:0] model [K];

  coef_regfile #(.K(K)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic [95:0] exp_v, input string what);
    checks++;
    if (rdata !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s: exp %h got %h", what, exp_v, rdata);
    end
  endtask

  initial begin
    we = '0; waddr = '0; raddr = '0; wdata = '0;
    @(negedge clk);
    for (int k = 0; k < K; k++)
      for (int f = 0; f < 3; f++) begin
        we = 3'b1 << f; waddr = AW'(k); wdata = $urandom;
        model[k][32*f +: 32] = wdata;
        @(negedge clk);
      end
    we = '0;
    for (int k = 0; k < K; k++) begin
      raddr = AW'(k);
      @(negedge clk);            // one clock of read latency
      check(model[k], "read");
    end
    // single-field rewrites and read-during-write
    for (int i = 0; i < 200; i++) begin
      automatic int k = $urandom_range(K - 1);
      automatic int f = $urandom_range(2);
      raddr = AW'(k); we = 3'b1 << f; waddr = AW'(k); wdata = $urandom;
      @(negedge clk);
      check(model[k], "read during write returns old word");
      model[k][32*f +: 32] = wdata;
      we = '0;
      @(negedge clk);
      check(model[k], "field rewrite");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10 * K) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
