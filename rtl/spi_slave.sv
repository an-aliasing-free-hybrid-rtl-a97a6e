// spi_slave: SPI target receiving the BFO's 48-bit configuration commands.
//
// A command is 48 bits, sent most-significant bit first: a 16-bit address
// followed by 32 bits of data. SPI mode 0 is used: the controller changes MOSI
// while SCLK is low and the BFO samples it on the rising SCLK edge; CS_N low
// frames the transfer. SCLK, CS_N and MOSI are synchronised to the core clock
// with two flip-flops each, so SCLK must stay high and low for at least three
// core clocks (13 Mb/s against a 98.304 MHz core clock gives about 3.8).
// Every 48th bit completes a command, so several commands may follow each other
// within one CS_N frame; raising CS_N discards a partial command.
// Timing: wr_valid pulses for one core clock, three to four core clocks after the
// rising SCLK edge of the command's last bit. The interface is write-only.
// The 48-bit command with 16 address and 32 data bits is the paper's; the SPI
// mode, bit order, synchroniser and write-only use are this design's choices.
module spi_slave #(
  parameter int unsigned CMD_W  = 48,
  parameter int unsigned ADDR_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    sclk,
  input  logic                    cs_n,
  input  logic                    mosi,
  output logic                    wr_valid,
  output logic [ADDR_W-1:0]       wr_addr,
  output logic [CMD_W-ADDR_W-1:0] wr_data
);

  localparam int unsigned CW = $clog2(CMD_W);

  logic [2:0]       sclk_q;
  logic [1:0]       cs_q, mosi_q;
  logic [CMD_W-2:0] shreg;   // first CMD_W-1 bits of a command
  logic [CW-1:0]    cnt;
  logic             rise;

  assign rise = sclk_q[1] && !sclk_q[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_q   <= '0;
      cs_q     <= '1;
      mosi_q   <= '0;
      shreg    <= '0;
      cnt      <= '0;
      wr_valid <= 1'b0;
      wr_addr  <= '0;
      wr_data  <= '0;
    end else begin
      sclk_q   <= {sclk_q[1:0], sclk};
      cs_q     <= {cs_q[0], cs_n};
      mosi_q   <= {mosi_q[0], mosi};
      wr_valid <= 1'b0;
      if (cs_q[1]) begin
        cnt <= '0;
      end else if (rise) begin
        shreg <= {shreg[CMD_W-3:0], mosi_q[1]};
        if (cnt == CW'(CMD_W - 1)) begin
          cnt      <= '0;
          wr_valid <= 1'b1;
          {wr_addr, wr_data} <= {shreg, mosi_q[1]};
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

endmodule
