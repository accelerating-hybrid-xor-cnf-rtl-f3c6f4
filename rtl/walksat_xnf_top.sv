// walksat_xnf_top: in-memory WalkSAT-XNF solver for hybrid XOR-CNF problems.
//
// The design solves a SAT instance made of CNF clauses (OR of literals) and
// XOR clauses (odd number of true literals) with the WalkSAT-XNF local search:
// every iteration it computes make - break for all variables at once, adds
// Gaussian noise, and flips the variable in a violated clause with the highest
// noisy gain. The datapath is the paper's seven blocks:
//   (1) var_register      configuration register, drives x_j / ~x_j columns
//   (2) clause_crossbar   C x 2N literal array -> true-literal count per clause
//   (3) clause_eval       ADC parity (XOR) or =0 / =1 comparators (CNF)
//   (4) makebreak_crossbar transposed array -> make and break per variable
//   (5) gradient_unit + noise_gen  make + noise - break
//   (6) wta               winner-takes-all, one-hot
//   (7) variable_flip     XOR gates update the register
// sequenced by iteration_ctrl in three clock cycles per iteration. The
// analog crossbars, ADCs and comparators are modelled as exact digital logic.
//
// Interface (all synchronous to clk, active-low asynchronous reset):
//   prog_*   write one clause: prog_lits bit 2j = x_j, bit 2j+1 = ~x_j,
//            prog_is_xor selects the clause type, prog_valid enables the row.
//            Writes both crossbars and the evaluation configuration.
//   alias_*  write one entry of the 64-bin Gaussian alias table.
//   sigma    noise standard deviation, unsigned Q4.4 (0 turns noise off).
//   init_we/init_x  load the starting configuration (while not busy).
//   start    seed the noise generators with `seed` and begin iterating;
//            the run stops when all clauses are satisfied (done & sat) or
//            after max_iter flips (done & !sat). x is the configuration.
// Timing: an iteration takes exactly three cycles (paper: 3 cycles, 6 ns).
// Programming and init writes must not be issued while busy.
module walksat_xnf_top #(
  parameter int unsigned N_VARS     = walksat_pkg::DEF_N_VARS,
  parameter int unsigned N_CLAUSES  = walksat_pkg::DEF_N_CLAUSES,
  parameter int unsigned ADC_BITS   = walksat_pkg::DEF_ADC_BITS,
  parameter int unsigned ADC_LEVELS = 1 << ADC_BITS,
  localparam int unsigned ADDR_W    = $clog2(N_CLAUSES),
  localparam int unsigned CNT_W     = $clog2(2*N_VARS+1),
  localparam int unsigned MB_W      = $clog2(2*N_CLAUSES+1),
  localparam int unsigned GRAD_W    = walksat_pkg::grad_width(MB_W),
  localparam int unsigned IDX_W     = (N_VARS > 1) ? $clog2(N_VARS) : 1
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // clause programming
  input  logic                                 prog_we,
  input  logic [ADDR_W-1:0]                    prog_addr,
  input  logic [2*N_VARS-1:0]                  prog_lits,
  input  logic                                 prog_is_xor,
  input  logic                                 prog_valid,
  // noise table and level
  input  logic                                 alias_we,
  input  logic [walksat_pkg::ALIAS_IDX_W-1:0]  alias_addr,
  input  logic [walksat_pkg::ALIAS_PROB_W-1:0] alias_thresh,
  input  logic [walksat_pkg::ALIAS_IDX_W-1:0]  alias_idx,
  input  logic [walksat_pkg::SIGMA_W-1:0]      sigma,
  // run control
  input  logic                                 init_we,
  input  logic [N_VARS-1:0]                    init_x,
  input  logic [63:0]                          seed,
  input  logic                                 start,
  input  logic [walksat_pkg::ITER_W-1:0]       max_iter,
  output logic                                 busy,
  output logic                                 done,
  output logic                                 sat,
  output logic [walksat_pkg::ITER_W-1:0]       iter_count,
  output logic [N_VARS-1:0]                    x,
  output logic [IDX_W-1:0]                     last_flip
);
  import walksat_pkg::*;

  logic [2*N_VARS-1:0] x_cols;
  logic [N_VARS-1:0]   x_next, winner;
  logic [CNT_W-1:0]    row_count [N_CLAUSES];
  logic [N_CLAUSES-1:0] make_in_c, break_in_c, adc_clipped;
  logic [N_CLAUSES-1:0] make_in_q, break_in_q;
  logic                any_violated;
  logic [MB_W-1:0]     make_cnt [N_VARS];
  logic [MB_W-1:0]     break_cnt [N_VARS];
  logic signed [NOISE_W-1:0] noise [N_VARS];
  logic signed [GRAD_W-1:0]  grad_c [N_VARS];
  logic signed [GRAD_W-1:0]  grad_q [N_VARS];
  logic [N_VARS-1:0]   cand_c, cand_q;
  logic [IDX_W-1:0]    winner_idx;
  logic                winner_valid;
  phase_e              phase;
  logic                cap_eval, cap_grad, upd;

  iteration_ctrl u_ctrl (
    .clk, .rst_n, .start, .max_iter, .any_violated,
    .phase, .cap_eval, .cap_grad, .upd, .busy, .done, .sat, .iter_count
  );

  // (1) configuration register
  var_register #(.N_VARS(N_VARS)) u_reg (
    .clk, .rst_n,
    .init_we (init_we && !busy),
    .init_x,
    .upd_en  (upd),
    .x_next,
    .x,
    .x_cols
  );

  // (2) clause lookup crossbar
  clause_crossbar #(.N_VARS(N_VARS), .N_CLAUSES(N_CLAUSES)) u_xbar_clause (
    .clk, .prog_we, .prog_addr, .prog_lits, .x_cols, .row_count
  );

  // (3) evaluation circuits
  clause_eval #(.N_VARS(N_VARS), .N_CLAUSES(N_CLAUSES),
                .ADC_BITS(ADC_BITS), .ADC_LEVELS(ADC_LEVELS)) u_eval (
    .clk, .rst_n, .prog_we, .prog_addr, .prog_is_xor, .prog_valid,
    .row_count, .make_in(make_in_c), .break_in(break_in_c),
    .adc_clipped, .any_violated
  );

  // end of cycle 1: make/break row inputs
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      make_in_q  <= '0;
      break_in_q <= '0;
    end else if (cap_eval) begin
      make_in_q  <= make_in_c;
      break_in_q <= break_in_c;
    end
  end

  // (4) make/break crossbar
  makebreak_crossbar #(.N_VARS(N_VARS), .N_CLAUSES(N_CLAUSES)) u_xbar_mb (
    .clk, .prog_we, .prog_addr, .prog_lits, .prog_is_xor,
    .make_in(make_in_q), .break_in(break_in_q), .x, .make_cnt, .break_cnt
  );

  // (5) noise and gradient
  noise_gen #(.N_VARS(N_VARS)) u_noise (
    .clk, .rst_n,
    .seed_load (start && !busy),
    .seed,
    .step      (upd),
    .alias_we, .alias_addr, .alias_thresh, .alias_idx, .sigma,
    .noise
  );

  gradient_unit #(.N_VARS(N_VARS), .MB_W(MB_W)) u_grad (
    .make_cnt, .break_cnt, .noise, .grad(grad_c), .cand(cand_c)
  );

  // end of cycle 2: gradients
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < int'(N_VARS); j++) grad_q[j] <= '0;
      cand_q <= '0;
    end else if (cap_grad) begin
      grad_q <= grad_c;
      cand_q <= cand_c;
    end
  end

  // (6) winner-takes-all
  wta #(.N_VARS(N_VARS), .GRAD_W(GRAD_W)) u_wta (
    .grad(grad_q), .cand(cand_q), .winner, .winner_idx, .valid(winner_valid)
  );

  // (7) flip
  variable_flip #(.N_VARS(N_VARS)) u_flip (.x, .winner, .x_next);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   last_flip <= '0;
    else if (upd) last_flip <= winner_idx;
  end

  // A flip only happens when some clause was violated, so a winner exists.
  a_winner_on_update: assert property (@(posedge clk) disable iff (!rst_n)
      upd |-> winner_valid);

endmodule
