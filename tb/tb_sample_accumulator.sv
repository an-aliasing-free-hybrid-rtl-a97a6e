// tb_sample_accumulator: self-checking testbench of the subwave accumulator.
// Feeds samples of K = 32 partials with random values, random alias decisions
// and random subwave boundaries (including the default of all boundaries = K),
// sometimes with idle clocks between partials, and compares the four sums with
// a model. Checks that 'done' comes exactly one clock after the last partial.
module tb_sample_accumulator;
  import bfo_pkg::*;
  localparam int unsigned K = 32;
  localparam int unsigned AW = 5;
  localparam int unsigned ACC_W = PART_W + AW;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, first, last, pass;
  logic [AW-1:0] k;
  logic [2:0][15:0] bound;
  logic signed [PART_W-1:0] partial;
  logic done;
  logic [NSUB-1:0][ACC_W-1:0] x;
  int checks = 0, failures = 0;

  sample_accumulator #(.K(K)) dut (.*);

  always #5 clk = ~clk;

  longint model [NSUB];

  initial begin
    in_valid = 0; first = 0; last = 0; pass = 0; k = '0; partial = '0;
    bound = {3{16'(K)}};
    @(negedge clk); rst_n = 1'b1;
    for (int s = 0; s < 60; s++) begin
      if (s % 3 != 0) begin
        automatic int b0 = $urandom_range(K);
        automatic int b1 = b0 + $urandom_range(K - b0);
        automatic int b2 = b1 + $urandom_range(K - b1);
        bound = {16'(b2), 16'(b1), 16'(b0)};
      end else bound = {3{16'(K)}};
      for (int i = 0; i < NSUB; i++) model[i] = 0;
      for (int j = 0; j < K; j++) begin
        while ($urandom_range(4) == 0) begin
          in_valid = 0; @(negedge clk);
          checks++; if (done) failures++;
        end
        in_valid = 1; k = AW'(j); first = (j == 0); last = (j == K - 1);
        pass = ($urandom_range(3) != 0);
        partial = PART_W'(signed'($urandom)) <<< 2;
        if (pass) begin
          automatic int sb = (j < int'(bound[0])) ? 0 : (j < int'(bound[1])) ? 1 : (j < int'(bound[2])) ? 2 : 3;
          model[sb] += longint'(partial);
        end
        @(negedge clk);
        checks++;
        if (done !== last) begin failures++; $display("FAIL done timing"); end
      end
      in_valid = 0;
      for (int i = 0; i < NSUB; i++) begin
        checks++;
        if (longint'(signed'(x[i])) != model[i]) begin
          failures++;
          if (failures < 10) $display("FAIL s=%0d sub %0d exp %0d got %0d", s, i, model[i], signed'(x[i]));
        end
      end
    end
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
