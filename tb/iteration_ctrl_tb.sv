// iteration_ctrl_tb: self-checking test of the three-cycle sequencer.
// A model assignment register is "solved" after a chosen number of flips.
// The test checks the phase order EVAL -> MB -> WTA, exactly three cycles
// per iteration, the stop with sat when no clause is violated, the stop
// without sat at the iteration limit, an immediate stop when the start
// configuration is already a solution, and restart from DONE.
module iteration_ctrl_tb;
  import walksat_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, any_violated;
  logic [ITER_W-1:0] max_iter = '0, iter_count;
  phase_e phase;
  logic cap_eval, cap_grad, upd, busy, done, sat;
  int checks = 0, failures = 0;
  int flips;

  iteration_ctrl dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // violated until `solve_at` flips have been made
  int solve_at;
  logic clr = 0;
  always_ff @(posedge clk) if (clr) flips <= 0; else if (upd) flips <= flips + 1;
  assign any_violated = (flips < solve_at);

  task automatic run(int limit, int nsolve, bit exp_sat, int exp_iter);
    int cycles;
    @(negedge clk);
    solve_at = nsolve; clr = 1;
    max_iter = ITER_W'(limit);
    start = 1;
    @(negedge clk);
    start = 0; clr = 0;
    cycles = 0;
    while (!done && cycles < 10000) begin
      // phase order
      checks++;
      case (cycles % 3)
        0: if (phase !== ST_EVAL || !cap_eval) begin failures++; $display("FAIL cycle %0d not EVAL", cycles); end
        1: if (phase !== ST_MB || !cap_grad) begin failures++; $display("FAIL cycle %0d not MB", cycles); end
        2: if (phase !== ST_WTA || !upd) begin failures++; $display("FAIL cycle %0d not WTA", cycles); end
      endcase
      @(negedge clk);
      cycles++;
    end
    checks++;
    if (sat !== exp_sat || int'(iter_count) != exp_iter) begin
      failures++; $display("FAIL run: sat %b iter %0d exp %b %0d", sat, iter_count, exp_sat, exp_iter);
    end
    // three cycles per iteration plus the final evaluation cycle
    checks++;
    if (cycles != 3 * exp_iter + 1) begin
      failures++; $display("FAIL cycles %0d exp %0d", cycles, 3 * exp_iter + 1);
    end
    checks++;
    if (busy) begin failures++; $display("FAIL busy after done"); end
  endtask

  initial begin
    solve_at = 1000; clr = 1;
    repeat (2) @(negedge clk);
    checks++;
    if (phase !== ST_IDLE || busy || done) begin failures++; $display("FAIL reset state"); end
    rst_n = 1;
    run(100, 7, 1, 7);     // solved after 7 flips
    run(5, 1000, 0, 5);    // iteration limit
    run(100, 0, 1, 0);     // already a solution
    run(0, 3, 0, 0);       // limit of zero flips
    run(50, 23, 1, 23);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
