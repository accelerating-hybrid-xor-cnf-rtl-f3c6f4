// gradient_unit_tb: self-checking test of the gradient computation.
// The paper's worked example feeds make/break values 1/1, 2/0, 2/1, 0/1 and
// noise; the noiseless gradients are 0, 2, 1, -1 and only the first three
// variables are candidates (x4 is in no violated clause). Random make, break
// and noise values are then compared with make*16 + noise - break*16.
module gradient_unit_tb;
  localparam int N  = 8;
  localparam int MW = 7;
  localparam int GW = walksat_pkg::grad_width(MW);
  localparam int NW = walksat_pkg::NOISE_W;
  logic [MW-1:0] make_cnt [N];
  logic [MW-1:0] break_cnt [N];
  logic signed [NW-1:0] noise [N];
  logic signed [GW-1:0] grad [N];
  logic [N-1:0] cand;
  int checks = 0, failures = 0;

  gradient_unit #(.N_VARS(N), .MB_W(MW)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int j = 0; j < N; j++) begin
      int e;
      e = int'(make_cnt[j]) * 16 + int'(noise[j]) - int'(break_cnt[j]) * 16;
      checks++;
      if (int'(grad[j]) != e || cand[j] !== (make_cnt[j] != 0)) begin
        failures++;
        $display("FAIL var %0d grad %0d exp %0d cand %b", j, grad[j], e, cand[j]);
      end
    end
  endtask

  initial begin
    int mk [4] = '{1, 2, 2, 0};
    int bk [4] = '{1, 0, 1, 1};
    int eg [4] = '{0, 32, 16, -16};
    for (int j = 0; j < N; j++) begin make_cnt[j] = '0; break_cnt[j] = '0; noise[j] = '0; end
    for (int j = 0; j < 4; j++) begin make_cnt[j] = MW'(mk[j]); break_cnt[j] = MW'(bk[j]); end
    #1;
    for (int j = 0; j < 4; j++) begin
      checks++;
      if (int'(grad[j]) != eg[j]) begin failures++; $display("FAIL example %0d: %0d", j, grad[j]); end
    end
    checks++;
    if (cand[3:0] !== 4'b0111) begin failures++; $display("FAIL example cand %b", cand[3:0]); end
    for (int t = 0; t < 500; t++) begin
      for (int j = 0; j < N; j++) begin
        make_cnt[j]  = MW'($urandom);
        break_cnt[j] = MW'($urandom);
        if (t % 5 == 0) make_cnt[j] = '0;
        noise[j]     = NW'($signed(11'($urandom)) );
      end
      #1;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
