// partial_arg_mult: argument of one partial, theta_k = theta * n_k mod 1.
//
// Multiplies the base-frequency argument theta {u,16,32} by the frequency
// multiplier n_k {u,16,16}. The exact product has 48 fraction bits; the integer
// part is discarded (the modulo 1, which is free) and the top PHASE_W fraction
// bits are kept as the partial's argument in turns.
//
// Timing: one register, theta_k is valid one clock after theta and n_k.
// The computation is the paper's; the truncation to 32 bits and the pipeline
// register are this design's choices.
module partial_arg_mult #(
  parameter int unsigned THETA_W = 48,
  parameter int unsigned N_W     = 32,
  parameter int unsigned THETA_F = 32,   // fraction bits of theta
  parameter int unsigned N_F     = 16,   // fraction bits of n_k
  parameter int unsigned PHASE_W = 32
) (
  input  logic               clk,
  input  logic [THETA_W-1:0] theta,
  input  logic [N_W-1:0]     n_k,
  output logic [PHASE_W-1:0] theta_k
);

  localparam int unsigned PW = THETA_W + N_W;
  localparam int unsigned FB = THETA_F + N_F;   // fraction bits of the product

  logic [PW-1:0] prod;
  assign prod = PW'(theta) * PW'(n_k);

  always_ff @(posedge clk) theta_k <= prod[FB-1 -: PHASE_W];

endmodule
