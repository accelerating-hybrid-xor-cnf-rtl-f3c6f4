// variable_flip_tb: self-checking test of the XOR-gate flip array.
// Uses the update of the paper's worked example (configuration 1,1,0,1 with
// x2 the winner gives 1,0,0,1) and random one-hot and random vectors, each
// compared bit by bit with an independently computed result.
module variable_flip_tb;
  localparam int N = 12;
  logic [N-1:0] x, winner, x_next;
  int checks = 0, failures = 0;

  variable_flip #(.N_VARS(N)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // worked example, x1 at bit 0: x = 1,1,0,1 ; winner x2
    x = '0; winner = '0;
    x[3:0] = 4'b1011; winner[1] = 1'b1;
    #1;
    checks++;
    if (x_next[3:0] !== 4'b1001) begin failures++; $display("FAIL example %b", x_next[3:0]); end
    for (int t = 0; t < 300; t++) begin
      x = N'($urandom);
      winner = (t % 2 == 0) ? N'(1) << ($urandom % N) : N'($urandom);
      #1;
      for (int j = 0; j < N; j++) begin
        logic e;
        e = winner[j] ? !x[j] : x[j];
        checks++;
        if (x_next[j] !== e) begin failures++; $display("FAIL t=%0d bit %0d", t, j); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
