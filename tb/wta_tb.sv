// wta_tb: self-checking test of the winner-takes-all.
// The paper's worked example (noisy gradients -0.1, 1.8, 1.3, -0.8 with x4 not
// a candidate) must select x2. Random gradients, candidate masks and forced
// ties are compared with a linear scan for the largest gradient among
// candidates, lowest index on ties; no candidate must give valid = 0.
module wta_tb;
  localparam int N  = 13;
  localparam int GW = 10;
  localparam int IW = $clog2(N);
  logic signed [GW-1:0] grad [N];
  logic [N-1:0] cand, winner;
  logic [IW-1:0] winner_idx;
  logic valid;
  int checks = 0, failures = 0;

  wta #(.N_VARS(N), .GRAD_W(GW)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    int best;
    logic [N-1:0] e;
    best = -1;
    for (int j = 0; j < N; j++)
      if (cand[j] && (best < 0 || grad[j] > grad[best])) best = j;
    e = '0;
    if (best >= 0) e[best] = 1'b1;
    checks++;
    if (winner !== e || valid !== (best >= 0) || (best >= 0 && winner_idx !== IW'(best))) begin
      failures++;
      $display("FAIL winner %b exp %b valid %b", winner, e, valid);
    end
  endtask

  initial begin
    for (int j = 0; j < N; j++) grad[j] = '0;
    // example, gradients x16: -0.1 -> -2, 1.8 -> 29, 1.3 -> 21, -0.8 -> -13
    grad[0] = -2; grad[1] = 29; grad[2] = 21; grad[3] = -13;
    cand = N'(4'b0111);
    #1;
    checks++;
    if (winner !== N'(4'b0010)) begin failures++; $display("FAIL example winner %b", winner); end
    compare();
    for (int t = 0; t < 2000; t++) begin
      for (int j = 0; j < N; j++) grad[j] = (t % 3 == 0) ? GW'($signed(3'($urandom))) : GW'($urandom);
      cand = N'($urandom);
      if (t % 50 == 0) cand = '0;
      if (t % 7 == 0) cand = '1;
      #1;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
