// arg_accumulator: base-frequency argument accumulator of one oscillator.
//
// Tracks theta <- (theta + f/fs) mod 2^QI, with theta in {u,QI,32} and f/fs in
// {u,0,32}. Keeping QI = 16 integer bits (equal to the number of fraction bits
// of the multipliers n_k) is what lets every partial's argument be derived from
// this single value: theta * n_k mod 1 is unchanged when theta is reduced
// modulo 2^16, because 2^16 * n_k is an integer. The modulo is the natural
// wrap-around of the register.
//
// Interface: 'step' advances theta by one sample; the new value appears on
// 'theta' the clock after 'step'. Reset sets theta = 0 (sample index 0).
// The recursion, the formats and the reset value follow the paper.
module arg_accumulator #(
  parameter int unsigned QI      = 16,
  parameter int unsigned DELTA_W = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  step,
  input  logic [DELTA_W-1:0]    delta,
  output logic [QI+DELTA_W-1:0] theta
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    theta <= '0;
    else if (step) theta <= theta + (QI+DELTA_W)'(delta);
  end

endmodule
