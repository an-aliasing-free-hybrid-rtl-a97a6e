// tb_partial_arg_mult: self-checking testbench of theta_k = theta * n_k mod 1.
// The expected value is built from partial products in 64-bit arithmetic:
// with theta = th_hi * 2^32 + th_lo, the fraction (48 bits) of theta * n is
// (th_lo * n + ((th_hi * n) mod 2^16) * 2^32) mod 2^48, of which the top 32 bits
// are kept. Includes the paper's example theta = 1, n = 1.5 -> 0.5.
module tb_partial_arg_mult;
  logic        clk = 1'b0;
  logic [47:0] theta;
  logic [31:0] n_k;
  logic [31:0] theta_k;
  int checks = 0, failures = 0;

  partial_arg_mult dut (.*);

  always #5 clk = ~clk;

  function automatic logic [31:0] model(logic [47:0] th, logic [31:0] n);
    longint unsigned lo, hi, f;
    lo = longint'(th[31:0]) * longint'(n);
    hi = (longint'(th[47:32]) * longint'(n)) & 64'hffff;
    f  = (lo + (hi << 32)) & 64'hffff_ffff_ffff;
    return 32'(f >> 16);
  endfunction

  task automatic one(input logic [47:0] th, input logic [31:0] n);
    theta = th; n_k = n;
    @(negedge clk);
    checks++;
    if (theta_k !== model(th, n)) begin
      failures++;
      if (failures < 10) $display("FAIL th=%h n=%h exp %h got %h", th, n, model(th, n), theta_k);
    end
  endtask

  initial begin
    @(negedge clk);
    one(48'h1_0000_0000, 32'h0001_8000);   // theta = 1, n = 1.5
    checks++; if (theta_k != 32'h8000_0000) failures++;
    one(48'hffff_ffff_ffff, 32'hffff_ffff);
    one(48'h0, 32'h1234_5678);
    for (int i = 0; i < 5000; i++) one({16'($urandom), 32'($urandom)}, $urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
