// variable_flip: the XOR-gate array that applies the winner (block 7).
//
// Each variable's next value is its current value XOR the corresponding bit
// of the winner-takes-all one-hot vector, so exactly the winning variable is
// inverted and all others are kept, as the paper describes. Purely
// combinational; the result is loaded into var_register at the end of the
// third cycle of an iteration.
module variable_flip #(
  parameter int unsigned N_VARS = walksat_pkg::DEF_N_VARS
) (
  input  logic [N_VARS-1:0] x,
  input  logic [N_VARS-1:0] winner,
  output logic [N_VARS-1:0] x_next
);

  assign x_next = x ^ winner;

endmodule
