// makebreak_crossbar: make and break computation crossbar (block 4).
//
// Physically separate array holding the transpose of the clause crossbar: the
// clauses are its rows (inputs) and the 2*N_VARS literal columns its outputs.
// Every clause row is driven with its make input and its break input from
// clause_eval; each column sums the inputs of the clauses it connects to.
//   make_j  = sum over clauses of make_in * (b_i,2j + b_i,2j+1)
//   break_j = sum over XOR clauses of break_in * (b_i,2j + b_i,2j+1)
//           + x_j  * sum over CNF clauses of break_in * b_i,2j
//           + ~x_j * sum over CNF clauses of break_in * b_i,2j+1
// The two columns of a variable are added, as the paper describes. The CNF
// break column outputs pass through "pass transistors" gated by the literal's
// value, so only the literal that makes the clause true counts; the XOR
// breaks are not gated because flipping any member breaks a satisfied XOR.
// This split of XOR and CNF rows follows block 4 of the paper's architecture
// figure, which draws the XOR and CNF clauses as two stacked sub-arrays.
// The paper applies the make and break inputs to the array one after the
// other or on two arrays; here both sums are formed in the same cycle.
// Programming: prog_we writes clause prog_addr (its literal bits and type);
// the cells model non-volatile memory and are not reset.
// Timing: outputs are combinational.
module makebreak_crossbar #(
  parameter int unsigned N_VARS    = walksat_pkg::DEF_N_VARS,
  parameter int unsigned N_CLAUSES = walksat_pkg::DEF_N_CLAUSES,
  localparam int unsigned ADDR_W   = $clog2(N_CLAUSES),
  localparam int unsigned MB_W     = $clog2(2*N_CLAUSES+1)
) (
  input  logic                  clk,
  input  logic                  prog_we,
  input  logic [ADDR_W-1:0]     prog_addr,
  input  logic [2*N_VARS-1:0]   prog_lits,
  input  logic                  prog_is_xor,
  input  logic [N_CLAUSES-1:0]  make_in,
  input  logic [N_CLAUSES-1:0]  break_in,
  input  logic [N_VARS-1:0]     x,
  output logic [MB_W-1:0]       make_cnt  [N_VARS],
  output logic [MB_W-1:0]       break_cnt [N_VARS]
);

  // cells_t[c] is literal column c: one bit per clause row.
  logic [N_CLAUSES-1:0] cells_t [2*N_VARS];
  logic [N_CLAUSES-1:0] row_is_xor;

  always_ff @(posedge clk) begin
    if (prog_we && 32'(prog_addr) < N_CLAUSES) begin
      row_is_xor[prog_addr] <= prog_is_xor;
      for (int c = 0; c < int'(2*N_VARS); c++)
        cells_t[c][prog_addr] <= prog_lits[c];
    end
  end

  always_comb begin
    logic [N_CLAUSES-1:0] brk_xor, brk_cnf;
    brk_xor = break_in &  row_is_xor;
    brk_cnf = break_in & ~row_is_xor;
    for (int j = 0; j < int'(N_VARS); j++) begin
      logic [MB_W-1:0] mk_p, mk_n, bx_p, bx_n, bc_p, bc_n;
      mk_p = MB_W'($countones(cells_t[2*j]   & make_in));
      mk_n = MB_W'($countones(cells_t[2*j+1] & make_in));
      bx_p = MB_W'($countones(cells_t[2*j]   & brk_xor));
      bx_n = MB_W'($countones(cells_t[2*j+1] & brk_xor));
      bc_p = MB_W'($countones(cells_t[2*j]   & brk_cnf));
      bc_n = MB_W'($countones(cells_t[2*j+1] & brk_cnf));
      make_cnt[j]  = mk_p + mk_n;
      break_cnt[j] = bx_p + bx_n + (x[j] ? bc_p : bc_n);
    end
  end

endmodule
