// coef_regfile: Fourier-coefficient register file of one oscillator.
//
// Holds K words of 96 bits, word k-1 = {n_k, b_k, a_k} (each 32 bits). The
// configuration interface writes one 32-bit field of one word per cycle (we[0]
// writes a_k, we[1] b_k, we[2] n_k); the oscillator's partial sequencer reads
// one whole word per cycle. Read and write ports are independent, so the
// coefficients can be rewritten while the oscillator runs; a word read in the
// cycle it is written returns its old contents.
//
// Timing: synchronous read, rdata is valid one clock after raddr.
// The K x 96 organisation is the paper's; the field-wise write enables and the
// one-cycle read latency are this design's choices. The array is not reset.
module coef_regfile #(
  parameter int unsigned K  = 1024,
  parameter int unsigned AW = (K > 1) ? $clog2(K) : 1
) (
  input  logic          clk,
  input  logic [2:0]    we,
  input  logic [AW-1:0] waddr,
  input  logic [31:0]   wdata,
  input  logic [AW-1:0] raddr,
  output logic [95:0]   rdata
);

  logic [2:0][31:0] mem [K];

  always_ff @(posedge clk) begin
    for (int f = 0; f < 3; f++) begin
      if (we[f]) mem[waddr][f] <= wdata;
    end
    rdata <= mem[raddr];
  end

endmodule
