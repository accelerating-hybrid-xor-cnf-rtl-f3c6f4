// var_register: the variable-configuration register (block 1 of the solver).
//
// Holds the current assignment x[N_VARS-1:0] and drives the input columns of
// the clause crossbar: column 2j carries x_j and column 2j+1 carries its
// complement, as in the paper's column-pair mapping {2j, 2j+1}.
// Interface: init_we loads init_x (the starting configuration chosen by the
// host); otherwise upd_en loads x_next, the flipped configuration produced by
// the XOR-gate array at the end of an iteration. init_we has priority.
// Timing: both loads take effect at the next rising clock edge; the column
// outputs follow the register combinationally. Reset clears the register
// (this design's choice; the paper only says the register is initialised).
module var_register #(
  parameter int unsigned N_VARS = walksat_pkg::DEF_N_VARS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  init_we,
  input  logic [N_VARS-1:0]     init_x,
  input  logic                  upd_en,
  input  logic [N_VARS-1:0]     x_next,
  output logic [N_VARS-1:0]     x,
  output logic [2*N_VARS-1:0]   x_cols
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       x <= '0;
    else if (init_we) x <= init_x;
    else if (upd_en)  x <= x_next;
  end

  always_comb begin
    for (int j = 0; j < int'(N_VARS); j++) begin
      x_cols[2*j]   = x[j];
      x_cols[2*j+1] = ~x[j];
    end
  end

endmodule
