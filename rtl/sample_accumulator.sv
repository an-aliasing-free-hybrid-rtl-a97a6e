// sample_accumulator: sums the partials of one sample into up to four subwaves.
//
// Each clock one CORDIC partial arrives with its partial index k (0-based), the
// alias-control decision 'pass' and the flags 'first' and 'last' that mark the
// first and last partial of a sample. Partials that pass are added into the sum
// of their subwave; the subwave of partial k is given by three boundaries:
//   k < bound[0] -> x_1,  k < bound[1] -> x_2,  k < bound[2] -> x_3,  else x_4.
// With all three boundaries equal to K (the reset value) every partial lands in
// x_1, which is the plain single-waveform mode. On 'first' the four sums restart;
// on 'last' the completed sums are copied to the outputs and 'done' pulses for
// one clock, while the next sample already accumulates.
//
// Timing: 'done' and 'x' appear one clock after the partial flagged 'last'.
// Independent subwave sums and the K-partial sample are the paper's; splitting by
// contiguous index ranges and the 44-bit sums are this design's choices.
module sample_accumulator
  import bfo_pkg::*;
#(
  parameter int unsigned K     = 1024,
  parameter int unsigned ACC_W = PART_W + ((K > 1) ? $clog2(K) : 1),
  parameter int unsigned AW    = (K > 1) ? $clog2(K) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic                         first,
  input  logic                         last,
  input  logic                         pass,
  input  logic [AW-1:0]                k,
  input  logic [2:0][15:0]             bound,
  input  logic signed [PART_W-1:0]     partial,
  output logic                         done,
  output logic [NSUB-1:0][ACC_W-1:0]   x
);

  logic [NSUB-1:0][ACC_W-1:0] acc, acc_next;
  logic [1:0]                 sub;

  always_comb begin
    if      (16'(k) < bound[0]) sub = 2'd0;
    else if (16'(k) < bound[1]) sub = 2'd1;
    else if (16'(k) < bound[2]) sub = 2'd2;
    else                        sub = 2'd3;
  end

  always_comb begin
    for (int i = 0; i < NSUB; i++) begin
      acc_next[i] = first ? '0 : acc[i];
      if (pass && sub == 2'(i))
        acc_next[i] = acc_next[i] + ACC_W'(partial);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc  <= '0;
      x    <= '0;
      done <= 1'b0;
    end else begin
      done <= in_valid && last;
      if (in_valid) begin
        acc <= acc_next;
        if (last) x <= acc_next;
      end
    end
  end

endmodule
