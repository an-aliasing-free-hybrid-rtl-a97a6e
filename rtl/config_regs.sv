// config_regs: memory-map decoder and configuration registers of the BFO.
//
// Every write from the SPI interface carries a 16-bit address and 32 bits of
// data and lands in one of three regions (layout in bfo_pkg):
//   addr[15] = 0            coefficient register files: addr[14:12] selects the
//                           oscillator (0-3 voice L, 4-7 voice R), addr[11:10] the
//                           field (a_k, b_k, n_k; 3 is ignored), addr[9:0] k-1.
//                           The write is forwarded to that register file.
//   addr[15:7] = 9'h100     oscillator registers: addr[6:4] oscillator,
//                           addr[3:0] register number (bfo_pkg::osc_reg_e).
//   addr[15:2] = 14'h2040   mixer matrix coefficient m[addr[1]][addr[0]].
// Writes to other addresses are ignored.
// Reset values: f/fs = 0, f_HP = 0, f_LP = 0.5 (no partial above fs/2), all
// partials in subwave 1 with v_1 = 1 and v_2..v_4 = 0, bit mask all ones, rate
// crusher off, identity mixer. f_HP, f_LP and the memory-mapped, SPI-written
// organisation are the paper's; the address layout and the other reset values
// are this design's choices.
// Timing: registers take the written value one clock after wr_valid; a
// coefficient write reaches the register file in the same clock (combinational
// forwarding of coef_we/addr/data).
module config_regs
  import bfo_pkg::*;
#(
  parameter int unsigned K        = 1024,
  parameter int unsigned NOSC_TOT = 8,
  parameter int unsigned AW       = (K > 1) ? $clog2(K) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         wr_valid,
  input  logic [15:0]                  wr_addr,
  input  logic [31:0]                  wr_data,
  output osc_cfg_t [NOSC_TOT-1:0]      osc_cfg,
  output logic [1:0][1:0][31:0]        mix,
  output logic [NOSC_TOT-1:0][2:0]     coef_we,
  output logic [AW-1:0]                coef_addr,
  output logic [31:0]                  coef_data
);

  logic [2:0] osel;
  assign osel = wr_addr[14:12];

  // Coefficient writes
  always_comb begin
    coef_we = '0;
    if (wr_valid && !wr_addr[15] && wr_addr[11:10] != 2'd3 && 32'(osel) < NOSC_TOT)
      coef_we[osel][wr_addr[11:10]] = 1'b1;
  end
  assign coef_addr = wr_addr[AW-1:0];
  assign coef_data = wr_data;

  // Oscillator and mixer registers
  logic       osc_hit, mix_hit;
  logic [2:0] oreg_sel;
  assign osc_hit  = wr_valid && wr_addr[15:7] == 9'h100;
  assign mix_hit  = wr_valid && wr_addr[15:2] == 14'h2040;
  assign oreg_sel = wr_addr[6:4];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NOSC_TOT; o++) osc_cfg[o] <= osc_cfg_default(K);
      mix <= '{'{ONE_S130, 32'd0}, '{32'd0, ONE_S130}};  // m[1][1] = m[0][0] = 1
    end else begin
      if (osc_hit && 32'(oreg_sel) < NOSC_TOT) begin
        unique case (wr_addr[3:0])
          REG_DELTA:  osc_cfg[oreg_sel].delta    <= wr_data;
          REG_FHP:    osc_cfg[oreg_sel].f_hp     <= wr_data;
          REG_FLP:    osc_cfg[oreg_sel].f_lp     <= wr_data;
          REG_BOUND1: osc_cfg[oreg_sel].bound[0] <= wr_data[15:0];
          REG_BOUND2: osc_cfg[oreg_sel].bound[1] <= wr_data[15:0];
          REG_BOUND3: osc_cfg[oreg_sel].bound[2] <= wr_data[15:0];
          REG_V1:     osc_cfg[oreg_sel].v[0]     <= wr_data;
          REG_V2:     osc_cfg[oreg_sel].v[1]     <= wr_data;
          REG_V3:     osc_cfg[oreg_sel].v[2]     <= wr_data;
          REG_V4:     osc_cfg[oreg_sel].v[3]     <= wr_data;
          REG_MASK:   osc_cfg[oreg_sel].mask     <= wr_data;
          REG_RATE:   osc_cfg[oreg_sel].rate     <= wr_data;
          REG_CTRL:   osc_cfg[oreg_sel].rate_en  <= wr_data[0];
          default: ;
        endcase
      end
      if (mix_hit) mix[wr_addr[1]][wr_addr[0]] <= wr_data;
    end
  end

endmodule
