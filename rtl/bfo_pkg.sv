// bfo_pkg: shared types and constants of the big Fourier oscillator (BFO).
//
// Number formats follow the notation {s|u, integer bits, fraction bits}:
//   a_k, b_k            {s,0,31}   partial amplitudes (cosine and sine)
//   n_k                 {u,16,16}  frequency multiplier of partial k
//   f/fs (delta)        {u,0,32}   normalised base frequency
//   theta               {u,16,32}  base-frequency argument, tracked modulo 2^16
//   theta_k             {u,0,32}   argument of partial k in turns (this design keeps 32 bits)
//   f_HP, f_LP          {u,0,32}   alias-control band edges
//   v_i, mixer m_ij     {s,1,30}   weights (format chosen here, so that 1.0 exists)
//   samples             {s,0,31}
// The formats of a_k, b_k, n_k, f/fs and theta are the paper's; the rest are this
// design's choices.
//
// Memory map (16-bit SPI address, layout chosen by this design):
//   0ooo ffkk kkkk kkkk  coefficient register file: oscillator o (0-3 voice L,
//                        4-7 voice R), field f (0 = a_k, 1 = b_k, 2 = n_k), index k-1
//   1000 0000 0ooo rrrr  oscillator register r of oscillator o (see REG_* below)
//   1000 0001 0000 00ij  mixer matrix coefficient m_ij
package bfo_pkg;

  localparam int unsigned COEF_W  = 32;
  localparam int unsigned THETA_W = 48;   // u16.32
  localparam int unsigned PHASE_W = 32;   // theta_k, u0.32 turns
  localparam int unsigned PART_W  = 34;   // one CORDIC partial, s2.31
  localparam int unsigned NOSC    = 4;    // oscillators per voice
  localparam int unsigned NSUB    = 4;    // subwaves per oscillator

  // Oscillator register numbers (address bits 3:0)
  typedef enum logic [3:0] {
    REG_DELTA  = 4'd0,   // f/fs
    REG_FHP    = 4'd1,   // alias-control lower edge
    REG_FLP    = 4'd2,   // alias-control upper edge
    REG_BOUND1 = 4'd3,   // first partial index (0-based) of subwave 2
    REG_BOUND2 = 4'd4,   // ... of subwave 3
    REG_BOUND3 = 4'd5,   // ... of subwave 4
    REG_V1     = 4'd6,   // subwave weights v_1..v_4
    REG_V2     = 4'd7,
    REG_V3     = 4'd8,
    REG_V4     = 4'd9,
    REG_MASK   = 4'd10,  // bit-crusher mask (1 keeps a bit)
    REG_RATE   = 4'd11,  // rate-crusher rate / fs, u0.32
    REG_CTRL   = 4'd12   // bit 0: rate-crusher enable
  } osc_reg_e;

  typedef struct packed {
    logic [31:0]      delta;
    logic [31:0]      f_hp;
    logic [31:0]      f_lp;
    logic [2:0][15:0] bound;   // bound[0] = BOUND1
    logic [3:0][31:0] v;       // v[0] = v_1
    logic [31:0]      mask;
    logic [31:0]      rate;
    logic             rate_en;
  } osc_cfg_t;

  localparam logic [31:0] ONE_S130 = 32'h4000_0000;  // 1.0 in {s,1,30}
  localparam logic [31:0] HALF_U032 = 32'h8000_0000; // 0.5 in {u,0,32}

  function automatic osc_cfg_t osc_cfg_default(int unsigned k);
    osc_cfg_t c;
    c.delta   = '0;
    c.f_hp    = '0;
    c.f_lp    = HALF_U032;
    c.bound   = {3{16'(k)}};
    c.v       = {32'd0, 32'd0, 32'd0, ONE_S130};
    c.mask    = '1;
    c.rate    = '0;
    c.rate_en = 1'b0;
    return c;
  endfunction

  // CORDIC: micro-rotation angles atan(2^-m) expressed in turns, scaled by 2^36,
  // i.e. round(atan(2^-m) / (2*pi) * 2^36) for m = 0..25.
  localparam int unsigned CORDIC_ZF = 36;
  localparam int unsigned CORDIC_MMAX = 26;
  localparam logic [35:0] CORDIC_ATAN [CORDIC_MMAX] = '{
    36'd8589934592, 36'd5070934490, 36'd2679342518, 36'd1360076098,
    36'd682677297,  36'd341671446,  36'd170877414,  36'd85443921,
    36'd42722612,   36'd21361388,   36'd10680704,   36'd5340353,
    36'd2670177,    36'd1335088,    36'd667544,     36'd333772,
    36'd166886,     36'd83443,      36'd41722,      36'd20861,
    36'd10430,      36'd5215,       36'd2608,       36'd1304,
    36'd652,        36'd326
  };
  // kappa = prod_{m=0}^{25} (1 + 2^-2m)^-1/2 = 0.60725293500888, in {u,0,32}
  localparam logic [31:0] CORDIC_KAPPA = 32'd2608131496;

endpackage
