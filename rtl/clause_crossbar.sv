// clause_crossbar: clause-lookup crossbar array (block 2).
//
// A N_CLAUSES-by-2*N_VARS array of binary cells b_ij. Row i is clause i;
// column 2j is the positive literal x_j and column 2j+1 the negative literal
// ~x_j, following the paper. With the columns driven by the variable register
// (x_j on 2j, ~x_j on 2j+1), the row "current" is the matrix-vector product,
// i.e. the number of true literals of each clause. In the analog array this is
// a summed current; here it is the exact integer count (ideal devices).
// Programming: prog_we writes the 2*N_VARS cells of row prog_addr at the next
// clock edge (one row per write is this design's choice; the paper does not
// describe the programming circuitry). The cells model non-volatile memory and
// are not reset: every row that is used must be written, and unused rows are
// masked by the valid bits kept in clause_eval.
// Timing: row_count is combinational from x_cols and the stored cells.
module clause_crossbar #(
  parameter int unsigned N_VARS    = walksat_pkg::DEF_N_VARS,
  parameter int unsigned N_CLAUSES = walksat_pkg::DEF_N_CLAUSES,
  localparam int unsigned ADDR_W   = $clog2(N_CLAUSES),
  localparam int unsigned CNT_W    = $clog2(2*N_VARS+1)
) (
  input  logic                  clk,
  input  logic                  prog_we,
  input  logic [ADDR_W-1:0]     prog_addr,
  input  logic [2*N_VARS-1:0]   prog_lits,
  input  logic [2*N_VARS-1:0]   x_cols,
  output logic [CNT_W-1:0]      row_count [N_CLAUSES]
);

  logic [2*N_VARS-1:0] cells [N_CLAUSES];

  always_ff @(posedge clk) begin
    if (prog_we && 32'(prog_addr) < N_CLAUSES) cells[prog_addr] <= prog_lits;
  end

  always_comb begin
    for (int i = 0; i < int'(N_CLAUSES); i++)
      row_count[i] = CNT_W'($countones(cells[i] & x_cols));
  end

endmodule
