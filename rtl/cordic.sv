// cordic: fully unrolled, pipelined rotation CORDIC working in turns.
//
// Computes one term of the oscillator's Fourier sum per clock,
//   partial = a * cos(2*pi*phase) + b * sin(2*pi*phase),
// as the first component of the Givens rotation of the vector p = (a, -b) by
// the angle 'phase'. The angle is given in turns (phase in [0,1)), so no
// multiplication by 2*pi is ever needed:
//   1. quadrant correction: the two top phase bits select an exact rotation by
//      0, 90, 180 or 270 degrees (swaps and negations); the rest of the phase,
//      in [0, 0.25) turns, is left for the micro-rotations;
//   2. M micro-rotations m = 0..M-1, each a shift-and-add rotation by
//      +-atan(2^-m) whose direction d_m is the sign of the remaining angle; the
//      angles atan(2^-m) are stored in turns (bfo_pkg::CORDIC_ATAN);
//   3. scaling by the constant kappa = prod (1 + 2^-2m)^-1/2, then rounding to
//      {s,2,31}.
// Data words are XW = 40 bits with 36 fraction bits; the remaining angle has 36
// fraction bits of turns. The quadrant correction, M = 26 and the turn-based
// angles follow the paper; word lengths, rounding and pipelining are this
// design's choices. CORDIC_KAPPA in bfo_pkg is computed for M = 26.
//
// Interface: in_valid/a/b/phase/tag_in enter; out_valid/partial/tag_out leave
// LATENCY = M + 2 clocks later. 'tag' is carried alongside unchanged. A new
// input can enter every clock.
module cordic
  import bfo_pkg::*;
#(
  parameter int unsigned M     = 26,
  parameter int unsigned TAG_W = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [31:0]         a,        // {s,0,31}
  input  logic [31:0]         b,        // {s,0,31}
  input  logic [31:0]         phase,    // {u,0,32} turns
  input  logic [TAG_W-1:0]    tag_in,
  output logic                out_valid,
  output logic [PART_W-1:0]   partial,  // {s,2,31}
  output logic [TAG_W-1:0]    tag_out
);

  localparam int unsigned XW = 40;
  localparam int unsigned XF = 36;
  localparam int unsigned ZW = 38;

  logic signed [XW-1:0] x [M+1];
  logic signed [XW-1:0] y [M+1];
  logic signed [ZW-1:0] z [M+1];
  logic [M:0]           vld;
  logic [TAG_W-1:0]     tg  [M+1];

  // Stage 0: quadrant correction.
  logic signed [XW-1:0] p1, p2;
  assign p1 =   (XW'(signed'(a))) <<< (XF - 31);
  assign p2 = -((XW'(signed'(b))) <<< (XF - 31));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld[0] <= 1'b0;
    else        vld[0] <= in_valid;
  end

  always_ff @(posedge clk) begin
    unique case (phase[31:30])
      2'd0: begin x[0] <=  p1; y[0] <=  p2; end
      2'd1: begin x[0] <= -p2; y[0] <=  p1; end
      2'd2: begin x[0] <= -p1; y[0] <= -p2; end
      default: begin x[0] <= p2; y[0] <= -p1; end
    endcase
    z[0]  <= ZW'({phase[29:0], {(CORDIC_ZF - 32){1'b0}}});
    tg[0] <= tag_in;
  end

  // Stages 1..M: micro-rotations m = 0..M-1.
  for (genvar m = 0; m < M; m++) begin : g_stage
    logic signed [ZW-1:0] ang;
    assign ang = ZW'(CORDIC_ATAN[m]);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[m+1] <= 1'b0;
      else        vld[m+1] <= vld[m];
    end

    always_ff @(posedge clk) begin
      if (z[m] >= 0) begin
        x[m+1] <= x[m] - (y[m] >>> m);
        y[m+1] <= y[m] + (x[m] >>> m);
        z[m+1] <= z[m] - ang;
      end else begin
        x[m+1] <= x[m] + (y[m] >>> m);
        y[m+1] <= y[m] - (x[m] >>> m);
        z[m+1] <= z[m] + ang;
      end
      tg[m+1] <= tg[m];
    end
  end

  // Final stage: scaling by kappa and rounding to {s,2,31}.
  localparam int unsigned PW = XW + 33;
  logic signed [PW-1:0] scaled;
  assign scaled = PW'(x[M]) * signed'(PW'({1'b0, CORDIC_KAPPA}))
                + (PW'(1) <<< (32 + XF - 31 - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= vld[M];
  end

  always_ff @(posedge clk) begin
    partial <= PART_W'(scaled >>> (32 + XF - 31));
    tag_out <= tg[M];
  end

endmodule
