// clause_crossbar_tb: self-checking test of the clause-lookup crossbar.
// First the five clauses of the paper's worked example with x = (1,1,0,1):
// the true-literal counts printed in the example are 2, 1, 0, 1, 2. Then
// random clause rows and random assignments are compared with a count made
// in the testbench literal by literal.
module clause_crossbar_tb;
  localparam int N = 6;
  localparam int C = 10;
  localparam int AW = $clog2(C);
  localparam int CW = $clog2(2*N+1);
  logic clk = 0, prog_we = 0;
  logic [AW-1:0] prog_addr = '0;
  logic [2*N-1:0] prog_lits = '0, x_cols = '0;
  logic [CW-1:0] row_count [C];
  logic [2*N-1:0] shadow [C];
  int checks = 0, failures = 0;

  clause_crossbar #(.N_VARS(N), .N_CLAUSES(C)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // literal helpers: variable v (1-based), positive -> column 2(v-1)
  function automatic logic [2*N-1:0] lit(int v, bit neg);
    return (2*N)'(1) << (2*(v-1) + (neg ? 1 : 0));
  endfunction

  task automatic write_row(int a, logic [2*N-1:0] l);
    @(negedge clk);
    prog_we = 1; prog_addr = AW'(a); prog_lits = l;
    @(negedge clk);
    prog_we = 0;
    shadow[a] = l;
  endtask

  task automatic drive_x(logic [N-1:0] xv);
    for (int j = 0; j < N; j++) begin
      x_cols[2*j] = xv[j];
      x_cols[2*j+1] = !xv[j];
    end
  endtask

  initial begin
    int ex [5] = '{2, 1, 0, 1, 2};
    for (int i = 0; i < C; i++) write_row(i, '0);
    write_row(0, lit(1,0) | lit(2,0) | lit(3,0));   // x1 ^ x2 ^ x3
    write_row(1, lit(3,0) | lit(4,0));              // x3 ^ x4
    write_row(2, lit(2,1) | lit(3,0));              // ~x2 | x3
    write_row(3, lit(1,0) | lit(3,0));              // x1 | x3
    write_row(4, lit(1,0) | lit(2,1) | lit(3,1));   // x1 | ~x2 | ~x3
    drive_x(N'(6'b001011));                         // x1=1 x2=1 x3=0 x4=1
    #1;
    for (int i = 0; i < 5; i++) begin
      checks++;
      if (row_count[i] !== CW'(ex[i])) begin
        failures++; $display("FAIL example row %0d count %0d exp %0d", i, row_count[i], ex[i]);
      end
    end
    for (int t = 0; t < 40; t++) begin
      write_row($urandom % C, (2*N)'($urandom) & (2*N)'($urandom));
      for (int r = 0; r < 5; r++) begin
        logic [N-1:0] xv;
        xv = N'($urandom);
        drive_x(xv);
        #1;
        for (int i = 0; i < C; i++) begin
          int n;
          n = 0;
          for (int j = 0; j < N; j++) begin
            if (shadow[i][2*j]   &&  xv[j]) n++;
            if (shadow[i][2*j+1] && !xv[j]) n++;
          end
          checks++;
          if (row_count[i] !== CW'(n)) begin
            failures++; $display("FAIL row %0d count %0d exp %0d", i, row_count[i], n);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
