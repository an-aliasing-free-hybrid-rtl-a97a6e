// tb_alias_control: self-checking testbench of the alias-control decision.
// Directed cases at the Nyquist edge (f/fs = 1/64, n = 32 gives exactly 0.5 and
// must be rejected; one LSB of n less must pass), the band-pass edges, and
// random cases checked with a 64-bit model: pass = f_hp*2^16 <= delta*n < f_lp*2^16.
module tb_alias_control;
  logic        clk = 1'b0;
  logic [31:0] delta, n_k, f_hp, f_lp;
  logic        pass;
  int checks = 0, failures = 0, npass = 0;

  alias_control dut (.*);

  always #5 clk = ~clk;

  function automatic logic model(logic [31:0] d, logic [31:0] n, logic [31:0] hp, logic [31:0] lp);
    longint unsigned p;
    p = longint'(d) * longint'(n);
    return (p >= (longint'(hp) << 16)) && (p < (longint'(lp) << 16));
  endfunction

  task automatic one(input logic [31:0] d, n, hp, lp, input logic exp_v);
    delta = d; n_k = n; f_hp = hp; f_lp = lp;
    @(negedge clk);
    checks++;
    if (pass !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL d=%h n=%h hp=%h lp=%h exp %b got %b", d, n, hp, lp, exp_v, pass);
    end
    if (pass) npass++;
  endtask

  initial begin
    @(negedge clk);
    // default band [0, 0.5): f/fs = 2^-6, n = 32.0 -> exactly 0.5
    one(32'h0400_0000, 32'h0020_0000, 32'h0, 32'h8000_0000, 1'b0);
    one(32'h0400_0000, 32'h001f_ffff, 32'h0, 32'h8000_0000, 1'b1);
    one(32'h0400_0000, 32'h0000_0000, 32'h0, 32'h8000_0000, 1'b1);   // n = 0: DC passes
    // partial far above 1 (integer part nonzero) is rejected
    one(32'h8000_0000, 32'h0100_0000, 32'h0, 32'hffff_ffff, 1'b0);
    // band-pass [0.25, 0.5): 0.25 passes, just below does not
    one(32'h0400_0000, 32'h0010_0000, 32'h4000_0000, 32'h8000_0000, 1'b1);
    one(32'h0400_0000, 32'h000f_ffff, 32'h4000_0000, 32'h8000_0000, 1'b0);
    // deliberate aliasing with f_lp > 0.5
    one(32'h0400_0000, 32'h0020_0000, 32'h0, 32'hc000_0000, 1'b1);
    for (int i = 0; i < 5000; i++) begin
      automatic logic [31:0] d = $urandom >> $urandom_range(31);
      automatic logic [31:0] n = $urandom >> $urandom_range(31);
      automatic logic [31:0] hp = ($urandom_range(1) == 1) ? 32'h0 : ($urandom >> 1);
      automatic logic [31:0] lp = ($urandom_range(1) == 1) ? 32'h8000_0000 : $urandom;
      one(d, n, hp, lp, model(d, n, hp, lp));
    end
    checks++; if (npass == 0 || npass == checks - 1) failures++;
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
