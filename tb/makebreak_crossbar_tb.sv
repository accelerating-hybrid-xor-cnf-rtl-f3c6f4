// makebreak_crossbar_tb: self-checking test of the make/break crossbar.
// The paper's worked example (x = 1,1,0,1; clause inputs 1/0, 0/1 for the XOR
// clauses and 1/0, 0/1, 0/0 for the CNF clauses) must give the per-variable
// make/break values printed at the gradient stage: 1/1, 2/0, 2/1, 0/1. Then
// random arrays, types and inputs are compared with a testbench model that
// follows the WalkSAT-XNF gain definition clause by clause.
module makebreak_crossbar_tb;
  localparam int N = 6;
  localparam int C = 12;
  localparam int AW = $clog2(C);
  localparam int MW = $clog2(2*C+1);
  logic clk = 0, prog_we = 0, prog_is_xor = 0;
  logic [AW-1:0] prog_addr = '0;
  logic [2*N-1:0] prog_lits = '0;
  logic [C-1:0] make_in = '0, break_in = '0;
  logic [N-1:0] x = '0;
  logic [MW-1:0] make_cnt [N];
  logic [MW-1:0] break_cnt [N];
  logic [2*N-1:0] shadow [C];
  logic [C-1:0] sx;
  int checks = 0, failures = 0;

  makebreak_crossbar #(.N_VARS(N), .N_CLAUSES(C)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [2*N-1:0] lit(int v, bit neg);
    return (2*N)'(1) << (2*(v-1) + (neg ? 1 : 0));
  endfunction

  task automatic write_row(int a, logic [2*N-1:0] l, bit is_xor);
    @(negedge clk);
    prog_we = 1; prog_addr = AW'(a); prog_lits = l; prog_is_xor = is_xor;
    @(negedge clk);
    prog_we = 0;
    shadow[a] = l; sx[a] = is_xor;
  endtask

  task automatic compare(string tag);
    for (int j = 0; j < N; j++) begin
      int mk, bk;
      mk = 0; bk = 0;
      for (int i = 0; i < C; i++) begin
        int occ;
        occ = int'(shadow[i][2*j]) + int'(shadow[i][2*j+1]);
        if (make_in[i]) mk += occ;
        if (break_in[i]) begin
          if (sx[i]) bk += occ;
          else begin
            // CNF: counts only if this variable's literal is the true one
            if (shadow[i][2*j]   &&  x[j]) bk++;
            if (shadow[i][2*j+1] && !x[j]) bk++;
          end
        end
      end
      checks++;
      if (make_cnt[j] !== MW'(mk) || break_cnt[j] !== MW'(bk)) begin
        failures++;
        $display("FAIL %s var %0d make/break %0d/%0d exp %0d/%0d", tag, j,
                 make_cnt[j], break_cnt[j], mk, bk);
      end
    end
  endtask

  initial begin
    int em [4] = '{1, 2, 2, 0};
    int eb [4] = '{1, 0, 1, 1};
    for (int i = 0; i < C; i++) write_row(i, '0, 0);
    write_row(0, lit(1,0) | lit(2,0) | lit(3,0), 1);
    write_row(1, lit(3,0) | lit(4,0), 1);
    write_row(2, lit(2,1) | lit(3,0), 0);
    write_row(3, lit(1,0) | lit(3,0), 0);
    write_row(4, lit(1,0) | lit(2,1) | lit(3,1), 0);
    x = N'(6'b001011);
    make_in  = C'(12'b0000_0000_0101);
    break_in = C'(12'b0000_0000_1010);
    #1;
    for (int j = 0; j < 4; j++) begin
      checks++;
      if (make_cnt[j] !== MW'(em[j]) || break_cnt[j] !== MW'(eb[j])) begin
        failures++;
        $display("FAIL example x%0d make/break %0d/%0d exp %0d/%0d", j+1,
                 make_cnt[j], break_cnt[j], em[j], eb[j]);
      end
    end
    compare("example");
    for (int t = 0; t < 60; t++) begin
      write_row($urandom % C, (2*N)'($urandom) & (2*N)'($urandom), 1'($urandom));
      for (int r = 0; r < 4; r++) begin
        x = N'($urandom);
        make_in = C'($urandom);
        break_in = C'($urandom) & ~make_in;
        #1;
        compare("random");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
