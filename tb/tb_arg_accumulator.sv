// tb_arg_accumulator: self-checking testbench of the argument accumulator.
// Checks reset to zero, that theta only moves on 'step', and compares theta
// after random steps with a model theta = (sum of deltas) mod 2^48 (u16.32,
// i.e. modulo 2^16 turns). A large delta forces several wrap-arounds.
module tb_arg_accumulator;
  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        step;
  logic [31:0] delta;
  logic [47:0] theta;
  int checks = 0, failures = 0, wraps = 0;
  longint unsigned model;

  arg_accumulator dut (.*);

  always #5 clk = ~clk;

  initial begin
    step = 1'b0; delta = '0;
    @(negedge clk);
    checks++; if (theta != 48'd0) failures++;
    rst_n = 1'b1;
    model = 0;
    for (int i = 0; i < 150000; i++) begin
      step  = ($urandom_range(3) != 0);
      delta = (i < 1000) ? $urandom : 32'hffff_ff00 + 32'($urandom_range(255));
      @(negedge clk);
      if (step) begin
        model = model + longint'(delta);
        if (model >= 64'h1_0000_0000_0000) begin
          model = model - 64'h1_0000_0000_0000;
          wraps++;
        end
      end
      checks++;
      if (64'(theta) != model) begin
        failures++;
        if (failures < 10) $display("FAIL i=%0d exp %h got %h", i, model, theta);
      end
    end
    // theta must hold without step
    step = 1'b0;
    repeat (5) @(negedge clk);
    checks++; if (64'(theta) != model) failures++;
    checks++; if (wraps == 0) begin failures++; $display("FAIL no wrap-around exercised"); end
    $display("wraps: %0d", wraps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
