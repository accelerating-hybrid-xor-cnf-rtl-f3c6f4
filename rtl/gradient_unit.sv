// gradient_unit: noisy gradient computation (block 5).
//
// For every variable j: grad_j = make_j + noise_j - break_j, the make value
// with the Gaussian noise added and the break value subtracted, as the
// paper's differential amplifiers do. make/break are integer counts; they are
// shifted to the fixed-point format of the noise (FRAC_BITS fraction bits)
// before the sum. cand_j = (make_j > 0) marks the variables that appear in at
// least one violated clause (the set U of the WalkSAT-XNF loop): only these
// may win. The paper's hardware does not say how U is formed; deriving it
// from a non-zero make value is this design's choice and is exact, because
// the make value counts the violated clauses that contain the variable.
// Timing: combinational; its outputs are registered at the end of the second
// cycle of an iteration.
module gradient_unit #(
  parameter int unsigned N_VARS  = walksat_pkg::DEF_N_VARS,
  parameter int unsigned MB_W    = $clog2(2*walksat_pkg::DEF_N_CLAUSES+1),
  localparam int unsigned GRAD_W = walksat_pkg::grad_width(MB_W)
) (
  input  logic [MB_W-1:0]                        make_cnt  [N_VARS],
  input  logic [MB_W-1:0]                        break_cnt [N_VARS],
  input  logic signed [walksat_pkg::NOISE_W-1:0] noise     [N_VARS],
  output logic signed [GRAD_W-1:0]               grad      [N_VARS],
  output logic [N_VARS-1:0]                      cand
);
  import walksat_pkg::*;

  always_comb begin
    for (int j = 0; j < int'(N_VARS); j++) begin
      logic signed [GRAD_W-1:0] mk, bk, nz;
      mk = $signed(GRAD_W'({make_cnt[j],  {FRAC_BITS{1'b0}}}));
      bk = $signed(GRAD_W'({break_cnt[j], {FRAC_BITS{1'b0}}}));
      nz = GRAD_W'(noise[j]);
      grad[j] = mk + nz - bk;
      cand[j] = (make_cnt[j] != '0);
    end
  end

endmodule
