// osc_output: output stage of one oscillator.
//
// Once per sample it receives the four subwave sums x_1..x_4 and forms
//   y = v_1 x_1 + v_2 x_2 + v_3 x_3 + v_4 x_4        (weights {s,1,30}),
// rounds y to {s,0,31} and clips it to the 32-bit range, raising 'clip' for that
// sample if it had to. Two optional distortion effects follow:
//   bit-crusher   y & mask: bits whose mask bit is 0 are forced to zero
//                 (mask all ones = off);
//   rate-crusher  a sample-and-hold: a {u,0,32} phase accumulator advances by
//                 'rate' (the hold rate divided by fs) every sample, and the held
//                 output takes the new sample only when the accumulator wraps.
//                 With rate_en = 0 every sample passes.
// Timing: out_valid, y and clip appear one clock after in_valid.
// The weighted subwave sum, clipping indicator and both crushers are the
// paper's; the weight format, rounding and the phase-accumulator form of the
// rate-crusher are this design's choices.
module osc_output
  import bfo_pkg::*;
#(
  parameter int unsigned ACC_W = 44
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [NSUB-1:0][ACC_W-1:0] x,
  input  logic [NSUB-1:0][31:0]      v,
  input  logic [31:0]                mask,
  input  logic [31:0]                rate,
  input  logic                       rate_en,
  output logic                       out_valid,
  output logic [31:0]                y,
  output logic                       clip
);

  localparam int unsigned SW = ACC_W + 32 + 2;

  localparam logic signed [SW-1:0] YMAX = (SW'(1) <<< 31) - SW'(1);
  localparam logic signed [SW-1:0] YMIN = -(SW'(1) <<< 31);

  logic signed [SW-1:0] sum, rnd;
  logic signed [31:0]   sat;
  logic                 ovf;
  logic [32:0]          ph_next;
  logic [31:0]          ph;

  always_comb begin
    sum = '0;
    for (int i = 0; i < NSUB; i++)
      sum = sum + SW'(signed'(x[i])) * SW'(signed'(v[i]));
    rnd = (sum + (SW'(1) <<< 29)) >>> 30;
    if (rnd > YMAX) begin
      sat = 32'sh7fff_ffff; ovf = 1'b1;
    end else if (rnd < YMIN) begin
      sat = 32'sh8000_0000; ovf = 1'b1;
    end else begin
      sat = 32'(rnd); ovf = 1'b0;
    end
    ph_next = 33'(ph) + 33'(rate);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
      clip      <= 1'b0;
      ph        <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        clip <= ovf;
        ph   <= ph_next[31:0];
        if (!rate_en || ph_next[32]) y <= sat & mask;
      end
    end
  end

endmodule
