// iteration_ctrl: three-cycle iteration sequencer and stop logic.
//
// One WalkSAT-XNF iteration takes three clock cycles, as in the paper:
//   ST_EVAL  the variable register drives the clause crossbar and the
//            evaluation circuits; make/break inputs are captured (cap_eval).
//            If no clause is violated the run ends with sat = 1; if
//            max_iter flips have been made it ends with sat = 0.
//   ST_MB    the make/break crossbar and gradient unit work; the noisy
//            gradients are captured (cap_grad).
//   ST_WTA   the winner-takes-all selects a variable, the register takes the
//            flipped configuration (upd), the noise generators step and the
//            iteration counter increments.
// start (accepted in ST_IDLE or ST_DONE) clears the counter and enters
// ST_EVAL; it is also the moment to seed the noise generators. The run
// repeats without further control until a stop condition, as the paper
// describes. done stays high in ST_DONE until the next start. The stop on
// the iteration limit is checked in ST_EVAL, so the final configuration is
// always evaluated (this design's choice). busy = not idle and not done.
module iteration_ctrl #(
  parameter int unsigned ITER_W = walksat_pkg::ITER_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ITER_W-1:0] max_iter,
  input  logic              any_violated,
  output walksat_pkg::phase_e phase,
  output logic              cap_eval,
  output logic              cap_grad,
  output logic              upd,
  output logic              busy,
  output logic              done,
  output logic              sat,
  output logic [ITER_W-1:0] iter_count
);
  import walksat_pkg::*;

  phase_e phase_d;

  always_comb begin
    phase_d = phase;
    unique case (phase)
      ST_IDLE, ST_DONE: if (start) phase_d = ST_EVAL;
      ST_EVAL: phase_d = (!any_violated || iter_count == max_iter) ? ST_DONE : ST_MB;
      ST_MB:   phase_d = ST_WTA;
      ST_WTA:  phase_d = ST_EVAL;
      default: phase_d = ST_IDLE;
    endcase
  end

  assign cap_eval = (phase == ST_EVAL);
  assign cap_grad = (phase == ST_MB);
  assign upd      = (phase == ST_WTA);
  assign busy     = (phase == ST_EVAL) || (phase == ST_MB) || (phase == ST_WTA);
  assign done     = (phase == ST_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase      <= ST_IDLE;
      iter_count <= '0;
      sat        <= 1'b0;
    end else begin
      phase <= phase_d;
      if ((phase == ST_IDLE || phase == ST_DONE) && start) begin
        iter_count <= '0;
        sat        <= 1'b0;
      end else if (phase == ST_EVAL && !any_violated) begin
        sat <= 1'b1;
      end else if (phase == ST_WTA) begin
        iter_count <= iter_count + 1'b1;
      end
    end
  end

  // An iteration is exactly three cycles: EVAL is always followed by MB or DONE.
  a_mb_after_eval: assert property (@(posedge clk) disable iff (!rst_n)
      phase == ST_MB |-> $past(phase) == ST_EVAL);
  a_wta_after_mb: assert property (@(posedge clk) disable iff (!rst_n)
      phase == ST_WTA |-> $past(phase) == ST_MB);

endmodule
