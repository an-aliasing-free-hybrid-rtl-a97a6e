// oscillator: one aliasing-free additive-synthesis oscillator.
//
// Generates x[l] = sum_k a_k cos(2 pi theta n_k) + b_k sin(2 pi theta n_k) over
// the partials k whose normalised frequency (f/fs) n_k lies in [f_HP, f_LP),
// with theta = l f/fs tracked modulo 2^16. One partial is computed per clock,
// so a sample takes K clocks (K fs = 98.304 MHz for K = 1024 at 96 kHz).
//
// Pipeline (one partial per clock, all stages run continuously after reset):
//   S0  partial counter k = 0..K-1 addresses the coefficient register file
//   S1  word {n_k, b_k, a_k} read; theta * n_k and (f/fs) * n_k multiplied;
//       theta advances by f/fs after the last partial of a sample has used it
//   S2  theta_k and the alias-control decision ready; enter the CORDIC
//   S2+M+2   partial leaves the CORDIC and is added to its subwave sum
//   +1  subwave sums of the sample complete
//   +1  weighted, clipped, bit- and rate-crushed sample y on 'y'
// 'sample_valid' pulses once every K clocks, M + 6 = 32 clocks after the
// sample's last partial was addressed. All oscillators leave reset together and
// therefore run in lock step.
//
// The blocks and their order follow the paper's oscillator diagram; the
// pipeline registers and the local partial counter are this design's choices.
module oscillator
  import bfo_pkg::*;
#(
  parameter int unsigned K  = 1024,
  parameter int unsigned M  = 26,
  parameter int unsigned AW = (K > 1) ? $clog2(K) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  osc_cfg_t      cfg,
  input  logic [2:0]    coef_we,
  input  logic [AW-1:0] coef_waddr,
  input  logic [31:0]   coef_wdata,
  output logic          sample_valid,
  output logic [31:0]   y,
  output logic          clip
);

  localparam int unsigned ACC_W = PART_W + AW;

  typedef struct packed {
    logic          first;
    logic          last;
    logic [AW-1:0] k;
  } ptag_t;

  // S0: partial counter
  logic [AW-1:0] kcnt;
  logic          run;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kcnt <= '0;
      run  <= 1'b0;
    end else begin
      run  <= 1'b1;
      if (run) kcnt <= (kcnt == AW'(K - 1)) ? '0 : kcnt + 1'b1;
    end
  end

  // S1: register-file word
  logic [95:0] word;
  logic        v1, v2;
  ptag_t       t0, t1, t2;
  assign t0 = '{first: (kcnt == '0), last: (kcnt == AW'(K - 1)), k: kcnt};

  coef_regfile #(.K(K), .AW(AW)) u_rf (
    .clk, .we(coef_we), .waddr(coef_waddr), .wdata(coef_wdata),
    .raddr(kcnt), .rdata(word)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      v2 <= 1'b0;
      t1 <= '0;
      t2 <= '0;
    end else begin
      v1 <= run;
      v2 <= v1;
      t1 <= t0;
      t2 <= t1;
    end
  end

  logic [THETA_W-1:0] theta;
  arg_accumulator #(.QI(16), .DELTA_W(32)) u_arg (
    .clk, .rst_n, .step(v1 && t1.last), .delta(cfg.delta), .theta
  );

  // S2: partial argument, alias decision, delayed coefficients
  logic [PHASE_W-1:0] theta_k;
  logic               pass;
  logic [31:0]        a2, b2;

  partial_arg_mult u_mul (
    .clk, .theta, .n_k(word[95:64]), .theta_k
  );

  alias_control u_alias (
    .clk, .delta(cfg.delta), .n_k(word[95:64]), .f_hp(cfg.f_hp), .f_lp(cfg.f_lp), .pass
  );

  always_ff @(posedge clk) begin
    a2 <= word[31:0];
    b2 <= word[63:32];
  end

  // CORDIC
  logic              c_valid;
  logic [PART_W-1:0] c_partial;
  logic [$bits(ptag_t):0] c_tag_in, c_tag_out;
  ptag_t             t3;
  logic              pass3;

  assign c_tag_in = {pass, t2};

  cordic #(.M(M), .TAG_W($bits(ptag_t) + 1)) u_cordic (
    .clk, .rst_n, .in_valid(v2), .a(a2), .b(b2), .phase(theta_k), .tag_in(c_tag_in),
    .out_valid(c_valid), .partial(c_partial), .tag_out(c_tag_out)
  );
  assign {pass3, t3} = c_tag_out;

  // Accumulate
  logic                       acc_done;
  logic [NSUB-1:0][ACC_W-1:0] xs;

  sample_accumulator #(.K(K), .ACC_W(ACC_W), .AW(AW)) u_acc (
    .clk, .rst_n, .in_valid(c_valid), .first(t3.first), .last(t3.last), .pass(pass3),
    .k(t3.k), .bound(cfg.bound), .partial(c_partial), .done(acc_done), .x(xs)
  );

  // Output
  osc_output #(.ACC_W(ACC_W)) u_out (
    .clk, .rst_n, .in_valid(acc_done), .x(xs), .v(cfg.v), .mask(cfg.mask),
    .rate(cfg.rate), .rate_en(cfg.rate_en), .out_valid(sample_valid), .y, .clip
  );

endmodule
