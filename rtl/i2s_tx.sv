// i2s_tx: I2S transmitter for the two mixed BFO outputs.
//
// Drives bit clock (sclk), word select (lrck) and serial data (sdata) of a
// standard (Philips) I2S stream with two 32-bit slots per frame, i.e. 64 bit
// clocks per sample. With SCLK_DIV = 16 core clocks per bit clock the frame is
// exactly 1024 core clocks long, one BFO sample period (6.144 MHz bit clock and
// 96 kHz word select at a 98.304 MHz core clock); the audio DAC derives its own
// master clock from these.
// lrck is low for the left slot and high for the right; each slot carries the
// 24 most significant bits of the sample, MSB first, beginning one bit clock
// after the lrck edge (I2S delay), followed by zeros. sdata and lrck change on
// the falling sclk edge, so the receiver samples them on the rising edge.
// 'load' latches a new pair of samples; a frame starts at the first load after
// reset and then repeats every 64 bit clocks, each frame sending the most
// recently loaded pair. Loads must therefore come once per frame period.
// The 24-bit resolution is the paper's; the frame format and the truncation of
// the 32-bit samples are this design's choices.
module i2s_tx #(
  parameter int unsigned SCLK_DIV = 16,   // core clocks per bit clock, even, >= 2
  parameter int unsigned DATA_W   = 24,
  parameter int unsigned SLOT_W   = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,
  input  logic [31:0] left,
  input  logic [31:0] right,
  output logic        sclk,
  output logic        lrck,
  output logic        sdata
);

  localparam int unsigned DW = (SCLK_DIV > 2) ? $clog2(SCLK_DIV) : 1;
  localparam int unsigned BW = $clog2(2 * SLOT_W);

  logic [DW-1:0]     div;
  logic [BW-1:0]     bitn;      // bit clock number in the frame, 0..63
  logic              active;
  logic [31:0]       hold_l, hold_r, cur_l, cur_r;
  logic [BW-1:0]     nxt;       // bit clock that starts at the next falling edge
  logic [BW-1:0]     d;         // nxt - 1: the I2S delay of one bit clock
  logic [31:0]       w;
  logic              nxt_bit;

  assign nxt = bitn + 1'b1;
  assign d   = nxt - 1'b1;
  assign w   = d[BW-1] ? cur_r : cur_l;
  assign nxt_bit = (32'(d[BW-2:0]) < DATA_W) ? w[5'(31 - 32'(d[BW-2:0]))] : 1'b0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div    <= '0;
      bitn   <= '1;
      active <= 1'b0;
      sclk   <= 1'b0;
      lrck   <= 1'b0;
      sdata  <= 1'b0;
      hold_l <= '0;
      hold_r <= '0;
      cur_l  <= '0;
      cur_r  <= '0;
    end else begin
      if (load) begin
        hold_l <= left;
        hold_r <= right;
        if (!active) begin
          active <= 1'b1;
          div    <= DW'(SCLK_DIV / 2);   // begin with a falling edge
        end
      end
      if (active) begin
        div <= (div == DW'(SCLK_DIV - 1)) ? '0 : div + 1'b1;
        if (div == DW'(SCLK_DIV / 2 - 1)) sclk <= 1'b1;
        if (div == DW'(SCLK_DIV - 1)) begin
          // falling edge: move to the next bit clock
          sclk  <= 1'b0;
          bitn  <= nxt;
          lrck  <= nxt[BW-1];
          sdata <= nxt_bit;
          if (nxt == '0) begin
            cur_l <= hold_l;
            cur_r <= hold_r;
          end
        end
      end
    end
  end

endmodule
