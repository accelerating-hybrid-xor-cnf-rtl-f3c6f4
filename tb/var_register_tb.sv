// var_register_tb: self-checking test of the configuration register.
// Checks reset, loading of the start configuration, update with the flipped
// configuration, the priority of init over update, hold when neither is
// asserted, and the x_j / ~x_j column pairs (column 2j = x_j, 2j+1 = ~x_j).
module var_register_tb;
  localparam int N = 8;
  logic clk = 0, rst_n = 0, init_we = 0, upd_en = 0;
  logic [N-1:0] init_x = '0, x_next = '0, x, model;
  logic [2*N-1:0] x_cols;
  int checks = 0, failures = 0;

  var_register #(.N_VARS(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_cols();
    for (int j = 0; j < N; j++) begin
      checks++;
      if (x_cols[2*j] !== model[j] || x_cols[2*j+1] !== !model[j]) begin
        failures++;
        $display("FAIL column pair %0d: %b%b for x=%b", j, x_cols[2*j+1], x_cols[2*j], model);
      end
    end
  endtask

  initial begin
    model = '0;
    repeat (2) @(negedge clk);
    checks++; if (x !== '0) begin failures++; $display("FAIL reset value %b", x); end
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      init_we = ($urandom % 4) == 0;
      upd_en  = ($urandom % 2) == 0;
      init_x  = N'($urandom);
      x_next  = N'($urandom);
      if (init_we) model = init_x; else if (upd_en) model = x_next;
      @(posedge clk); #1;
      checks++;
      if (x !== model) begin failures++; $display("FAIL t=%0d x=%b exp=%b", t, x, model); end
      check_cols();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
