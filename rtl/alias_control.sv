// alias_control: decides whether a partial is accumulated.
//
// A partial k is summed only if f_HP <= (f/fs) * n_k < f_LP. With the default
// band edges f_HP = 0 and f_LP = 0.5 this keeps exactly the partials below half
// the sampling rate, so no partial can alias; other edges give an ideal
// band-pass, low-pass or high-pass, or deliberately admit aliasing (f_LP > 0.5).
// The normalised partial frequency is computed exactly, as the u16.48 product
// of f/fs {u,0,32} and n_k {u,16,16}, and compared with the u0.32 band edges.
//
// Timing: one register, 'pass' belongs to the n_k presented one clock earlier.
// The condition and the defaults are the paper's; computing it with a full
// product is this design's choice, as the paper does not describe the circuit.
module alias_control (
  input  logic        clk,
  input  logic [31:0] delta,
  input  logic [31:0] n_k,
  input  logic [31:0] f_hp,
  input  logic [31:0] f_lp,
  output logic        pass
);

  logic [63:0] fk;      // u16.48
  logic [63:0] hp, lp;

  assign fk = 64'(delta) * 64'(n_k);
  assign hp = {16'd0, f_hp, 16'd0};
  assign lp = {16'd0, f_lp, 16'd0};

  always_ff @(posedge clk) pass <= (fk >= hp) && (fk < lp);

endmodule
