// clause_eval_tb: self-checking test of the clause evaluation circuits.
// The paper's worked example gives, for counts 2, 1, 0, 1, 2 on the rows
// XOR, XOR, CNF, CNF, CNF, the make/break inputs 1/0, 0/1, 1/0, 0/1, 0/0.
// Then every count 0..2N on both row types, with a 4-bit ADC, is compared
// with the rule: XOR -> break = parity of min(count, 15), make = inverse;
// CNF -> make = (count == 0), break = (count == 1). Invalid rows give 0/0.
module clause_eval_tb;
  localparam int N = 10;
  localparam int C = 6;
  localparam int AW = $clog2(C);
  localparam int CW = $clog2(2*N+1);
  logic clk = 0, rst_n = 0, prog_we = 0, prog_is_xor = 0, prog_valid = 0;
  logic [AW-1:0] prog_addr = '0;
  logic [CW-1:0] row_count [C];
  logic [C-1:0] make_in, break_in, adc_clipped;
  logic any_violated;
  int checks = 0, failures = 0;

  clause_eval #(.N_VARS(N), .N_CLAUSES(C), .ADC_BITS(4)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg(int a, bit is_xor, bit valid);
    @(negedge clk);
    prog_we = 1; prog_addr = AW'(a); prog_is_xor = is_xor; prog_valid = valid;
    @(negedge clk);
    prog_we = 0;
  endtask

  task automatic expect_row(int i, bit mk, bit bk);
    checks++;
    if (make_in[i] !== mk || break_in[i] !== bk) begin
      failures++;
      $display("FAIL row %0d count %0d: make/break %b/%b exp %b/%b",
               i, row_count[i], make_in[i], break_in[i], mk, bk);
    end
  endtask

  initial begin
    int exm [5] = '{1, 0, 1, 0, 0};
    int exb [5] = '{0, 1, 0, 1, 0};
    int cnt [5] = '{2, 1, 0, 1, 2};
    for (int i = 0; i < C; i++) row_count[i] = '0;
    repeat (2) @(negedge clk);
    // after reset no row is valid: nothing violated
    #1; checks++;
    if (any_violated !== 1'b0 || make_in !== '0) begin failures++; $display("FAIL reset rows active"); end
    rst_n = 1;
    cfg(0, 1, 1); cfg(1, 1, 1); cfg(2, 0, 1); cfg(3, 0, 1); cfg(4, 0, 1); cfg(5, 0, 0);
    for (int i = 0; i < 5; i++) row_count[i] = CW'(cnt[i]);
    row_count[5] = '0;          // an empty, invalid row
    #1;
    for (int i = 0; i < 5; i++) expect_row(i, exm[i][0], exb[i][0]);
    expect_row(5, 0, 0);
    checks++;
    if (any_violated !== 1'b1) begin failures++; $display("FAIL any_violated"); end
    // sweep all counts
    for (int n = 0; n <= 2*N; n++) begin
      int code;
      code = (n > 15) ? 15 : n;
      for (int i = 0; i < C; i++) row_count[i] = CW'(n);
      #1;
      expect_row(0, !code[0], code[0]);
      expect_row(2, n == 0, n == 1);
      expect_row(5, 0, 0);
      checks++;
      if (adc_clipped[0] !== (n > 15) || adc_clipped[2] !== 1'b0) begin
        failures++; $display("FAIL clip flag at count %0d", n);
      end
      checks++;
      if (any_violated !== ((!code[0]) || n == 0)) begin failures++; $display("FAIL any_violated n=%0d", n); end
    end
    // reprogram a row to invalid
    cfg(0, 1, 0);
    for (int i = 0; i < C; i++) row_count[i] = CW'(2);
    #1;
    expect_row(0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
