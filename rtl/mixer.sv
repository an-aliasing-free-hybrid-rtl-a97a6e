// mixer: voice summation and 2x2 output matrix of the BFO.
//
// When in_valid pulses (once per sample), the four oscillator samples of each
// voice are added into the voice sums L and R ({s,2,31}), and the two outputs are
// formed with a programmable 2x2 matrix of {s,1,30} coefficients:
//   out_l = m[0][0] L + m[0][1] R,     out_r = m[1][0] L + m[1][1] R.
// The identity matrix gives two independent voices (stereo); e.g. all four
// coefficients 0.5 give the same mono mix on both outputs. Each result is
// rounded to {s,0,31} and clipped to 32 bits; clip[0] (L) and clip[1] (R) are
// high for a sample that had to be clipped.
// Timing: out_valid, outputs and clip flags appear one clock after in_valid.
// The voice sums, the 2x2 matrix and the clipping indicators are the paper's;
// the coefficient format and the rounding are this design's choices.
module mixer
  import bfo_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [NOSC-1:0][31:0]     osc_l,
  input  logic [NOSC-1:0][31:0]     osc_r,
  input  logic [1:0][1:0][31:0]     m,
  output logic                      out_valid,
  output logic [31:0]               out_l,
  output logic [31:0]               out_r,
  output logic [1:0]                clip
);

  localparam int unsigned VW = 32 + $clog2(NOSC);   // voice sum width
  localparam int unsigned PW = VW + 32 + 1;         // mixed product sum width
  localparam logic signed [PW-1:0] YMAX = (PW'(1) <<< 31) - PW'(1);
  localparam logic signed [PW-1:0] YMIN = -(PW'(1) <<< 31);

  logic signed [VW-1:0] vs [2];
  logic signed [PW-1:0] mx [2];
  logic signed [31:0]   sat [2];
  logic [1:0]           ovf;

  always_comb begin
    vs[0] = '0;
    vs[1] = '0;
    for (int i = 0; i < NOSC; i++) begin
      vs[0] = vs[0] + VW'(signed'(osc_l[i]));
      vs[1] = vs[1] + VW'(signed'(osc_r[i]));
    end
    for (int o = 0; o < 2; o++) begin
      mx[o] = PW'(vs[0]) * PW'(signed'(m[o][0])) + PW'(vs[1]) * PW'(signed'(m[o][1]));
      mx[o] = (mx[o] + (PW'(1) <<< 29)) >>> 30;
      if (mx[o] > YMAX)      begin sat[o] = 32'sh7fff_ffff; ovf[o] = 1'b1; end
      else if (mx[o] < YMIN) begin sat[o] = 32'sh8000_0000; ovf[o] = 1'b1; end
      else                   begin sat[o] = 32'(mx[o]);     ovf[o] = 1'b0; end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_l     <= '0;
      out_r     <= '0;
      clip      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_l <= sat[0];
        out_r <= sat[1];
        clip  <= ovf;
      end
    end
  end

endmodule
