// wta: winner-takes-all selection (block 6).
//
// Returns a one-hot vector marking the candidate variable with the largest
// signed gradient. Non-candidates (variables in no violated clause) never win;
// if there is no candidate the output is all zero and valid is 0. Ties go to
// the lowest index. The paper builds the WTA from voltage-controlled delay
// lines, merger trees and arbiters (a time-domain race); this design uses a
// binary tree of digital compare-and-select nodes, which gives the same
// winner (the tie rule is this design's choice).
// Timing: combinational; used in the third cycle of an iteration.
module wta #(
  parameter int unsigned N_VARS = walksat_pkg::DEF_N_VARS,
  parameter int unsigned GRAD_W = 16,
  localparam int unsigned IDX_W = (N_VARS > 1) ? $clog2(N_VARS) : 1
) (
  input  logic signed [GRAD_W-1:0] grad [N_VARS],
  input  logic [N_VARS-1:0]        cand,
  output logic [N_VARS-1:0]        winner,
  output logic [IDX_W-1:0]         winner_idx,
  output logic                     valid
);

  // Tree over P leaves (P = next power of two); node n has children 2n, 2n+1.
  localparam int unsigned LEVELS = (N_VARS > 1) ? $clog2(N_VARS) : 1;
  localparam int unsigned P      = 1 << LEVELS;

  logic                    nv [2*P];
  logic signed [GRAD_W-1:0] ng [2*P];
  logic [IDX_W-1:0]        ni [2*P];

  always_comb begin
    for (int n = 0; n < int'(2*P); n++) begin
      nv[n] = 1'b0;
      ng[n] = '0;
      ni[n] = '0;
    end
    for (int l = 0; l < int'(P); l++) begin
      if (l < int'(N_VARS)) begin
        nv[P+l] = cand[l];
        ng[P+l] = grad[l];
        ni[P+l] = IDX_W'(l);
      end
    end
    for (int n = int'(P) - 1; n >= 1; n--) begin
      // right child wins only if strictly larger, or left has no candidate
      if (nv[2*n+1] && (!nv[2*n] || ng[2*n+1] > ng[2*n])) begin
        nv[n] = 1'b1;  ng[n] = ng[2*n+1];  ni[n] = ni[2*n+1];
      end else begin
        nv[n] = nv[2*n];  ng[n] = ng[2*n];  ni[n] = ni[2*n];
      end
    end
    valid      = nv[1];
    winner_idx = ni[1];
    winner     = '0;
    if (nv[1]) winner[ni[1]] = 1'b1;
  end

endmodule
