// pdm_modulator: first-order digital sigma-delta modulator (PDM output).
//
// Turns one mixed 32-bit output channel {s,0,31} into a 1-bit pulse-density
// stream at the core clock, i.e. at 1024 times the sample rate. The sample is
// converted to offset binary u = sample + 2^31 (0 ... 2^32-1) and added every
// clock to a 32-bit accumulator; the carry out of the addition is the output
// bit and the accumulator keeps the remainder. This error-feedback form is a
// first-order sigma-delta modulator: the density of ones equals u / 2^32 and the
// quantisation error is shaped by (1 - z^-1). An external low-pass filter
// recovers the audio signal.
// Timing: the input is used the clock it is presented; pdm is registered.
// A first-order modulator clocked at the oversampled core rate is the paper's;
// the accumulator form is this design's choice.
module pdm_modulator #(
  parameter int unsigned IN_W = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [IN_W-1:0] sample,
  output logic            pdm
);

  logic [IN_W-1:0] acc;
  logic [IN_W:0]   sum;

  assign sum = {1'b0, acc} + {1'b0, ~sample[IN_W-1], sample[IN_W-2:0]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
      pdm <= 1'b0;
    end else begin
      acc <= sum[IN_W-1:0];
      pdm <= sum[IN_W];
    end
  end

endmodule
