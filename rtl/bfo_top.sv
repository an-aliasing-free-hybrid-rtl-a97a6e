// bfo_top: the big Fourier oscillator (BFO), a two-voice additive-synthesis chip.
//
// Two voices, L and R, of four oscillators each (oscillators 0-3 and 4-7). Every
// oscillator sums up to K programmable partials with a CORDIC, one partial per
// clock, and delivers one sample every K clocks; at K = 1024 and a 98.304 MHz
// clock this is a 96 kHz sample rate. The mixer adds the four oscillators of
// each voice and applies a 2x2 matrix; the two mixed samples leave through an
// I2S transmitter (24 bits) and two first-order sigma-delta PDM outputs.
// Everything is configured through a write-only SPI port carrying 48-bit
// commands (16-bit address, 32-bit data), decoded by config_regs.
//
// Interface: core clock and active-low asynchronous reset; SPI target pins; I2S
// bit clock, word select and data; two PDM bits; clipping indicators per
// oscillator (clip_osc) and per mixer output (clip_mix), each high for the
// sample period in which clipping occurred.
// Timing: the first sample leaves the oscillators K + 32 clocks after reset and
// the mixer one clock later; the I2S frame (64 * SCLK_DIV clocks) must equal K
// clocks, which holds for the default SCLK_DIV = K / 64.
// The block structure follows the paper's BFO diagram; the pin list is this
// design's.
module bfo_top
  import bfo_pkg::*;
#(
  parameter int unsigned K        = 1024,
  parameter int unsigned M        = 26,
  parameter int unsigned SCLK_DIV = K / 64
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       spi_sclk,
  input  logic       spi_cs_n,
  input  logic       spi_mosi,
  output logic       i2s_sclk,
  output logic       i2s_lrck,
  output logic       i2s_sd,
  output logic       pdm_l,
  output logic       pdm_r,
  output logic [7:0] clip_osc,
  output logic [1:0] clip_mix
);

  localparam int unsigned AW = (K > 1) ? $clog2(K) : 1;
  localparam int unsigned NT = 2 * NOSC;

  // Configuration path
  logic        wr_valid;
  logic [15:0] wr_addr;
  logic [31:0] wr_data;

  spi_slave u_spi (
    .clk, .rst_n, .sclk(spi_sclk), .cs_n(spi_cs_n), .mosi(spi_mosi),
    .wr_valid, .wr_addr, .wr_data
  );

  osc_cfg_t [NT-1:0]     osc_cfg;
  logic [1:0][1:0][31:0] mix;
  logic [NT-1:0][2:0]    coef_we;
  logic [AW-1:0]         coef_addr;
  logic [31:0]           coef_data;

  config_regs #(.K(K), .NOSC_TOT(NT), .AW(AW)) u_cfg (
    .clk, .rst_n, .wr_valid, .wr_addr, .wr_data,
    .osc_cfg, .mix, .coef_we, .coef_addr, .coef_data
  );

  // Oscillators
  logic [NT-1:0]       s_valid;
  logic [NT-1:0][31:0] y;

  for (genvar o = 0; o < NT; o++) begin : g_osc
    oscillator #(.K(K), .M(M), .AW(AW)) u_osc (
      .clk, .rst_n, .cfg(osc_cfg[o]),
      .coef_we(coef_we[o]), .coef_waddr(coef_addr), .coef_wdata(coef_data),
      .sample_valid(s_valid[o]), .y(y[o]), .clip(clip_osc[o])
    );
  end

  // The oscillators run in lock step.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) s_valid == '0 || s_valid == '1);

  // Mixer
  logic        m_valid;
  logic [31:0] out_l, out_r;

  mixer u_mix (
    .clk, .rst_n, .in_valid(s_valid[0]),
    .osc_l(y[NOSC-1:0]), .osc_r(y[NT-1:NOSC]), .m(mix),
    .out_valid(m_valid), .out_l, .out_r, .clip(clip_mix)
  );

  // Outputs
  i2s_tx #(.SCLK_DIV(SCLK_DIV)) u_i2s (
    .clk, .rst_n, .load(m_valid), .left(out_l), .right(out_r),
    .sclk(i2s_sclk), .lrck(i2s_lrck), .sdata(i2s_sd)
  );

  pdm_modulator u_pdm_l (.clk, .rst_n, .sample(out_l), .pdm(pdm_l));
  pdm_modulator u_pdm_r (.clk, .rst_n, .sample(out_r), .pdm(pdm_r));

endmodule
