// clause_eval: per-clause evaluation circuits (block 3).
//
// Each clause row of the clause crossbar feeds one evaluation circuit whose
// kind depends on the clause type:
//   XOR clause: a low-resolution ADC digitises the true-literal count N; its
//               least-significant bit is the parity. LSB = 1 (odd, clause
//               satisfied) is the break input; the inverted LSB is the make
//               input. The ADC has ADC_LEVELS output codes and clips counts
//               above ADC_LEVELS-1 to the top code, so, as in a real converter,
//               a clause with more true literals than the ADC resolves gets a
//               wrong parity (paper: 4 bits for up to 15 literals; its
//               Supplementary Note 4 studies fewer levels, set ADC_LEVELS).
//   CNF clause: two comparators, N == 0 gives the make input (violated) and
//               N == 1 gives the break input (one true literal).
// For both types make_in is 1 exactly when the clause is violated, so the OR of
// make_in is the "some clause violated" signal used for solution detection.
// Per-row configuration (clause type and a valid bit) is written with prog_we
// together with the crossbar row; rows that are not valid output 0/0. The
// valid bit is this design's addition: an unused all-zero row would otherwise
// read as a violated empty clause. Valid bits reset to 0.
// Timing: outputs are combinational from row_count.
module clause_eval #(
  parameter int unsigned N_VARS     = walksat_pkg::DEF_N_VARS,
  parameter int unsigned N_CLAUSES  = walksat_pkg::DEF_N_CLAUSES,
  parameter int unsigned ADC_BITS   = walksat_pkg::DEF_ADC_BITS,
  parameter int unsigned ADC_LEVELS = 1 << ADC_BITS,
  localparam int unsigned ADDR_W    = $clog2(N_CLAUSES),
  localparam int unsigned CNT_W     = $clog2(2*N_VARS+1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  prog_we,
  input  logic [ADDR_W-1:0]     prog_addr,
  input  logic                  prog_is_xor,
  input  logic                  prog_valid,
  input  logic [CNT_W-1:0]      row_count [N_CLAUSES],
  output logic [N_CLAUSES-1:0]  make_in,
  output logic [N_CLAUSES-1:0]  break_in,
  output logic [N_CLAUSES-1:0]  adc_clipped,
  output logic                  any_violated
);

  logic [N_CLAUSES-1:0] is_xor;
  logic [N_CLAUSES-1:0] valid;

  initial assert (ADC_LEVELS >= 2 && ADC_LEVELS <= (1 << ADC_BITS))
    else $error("clause_eval: ADC_LEVELS must be within 2 .. 2**ADC_BITS");

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      is_xor <= '0;
      valid  <= '0;
    end else if (prog_we && 32'(prog_addr) < N_CLAUSES) begin
      is_xor[prog_addr] <= prog_is_xor;
      valid[prog_addr]  <= prog_valid;
    end
  end

  always_comb begin
    for (int i = 0; i < int'(N_CLAUSES); i++) begin
      logic [ADC_BITS-1:0] code;
      logic                lsb;
      adc_clipped[i] = 1'b0;
      if (32'(row_count[i]) > ADC_LEVELS - 1) begin
        code = ADC_BITS'(ADC_LEVELS - 1);
        adc_clipped[i] = valid[i] & is_xor[i];
      end else begin
        code = ADC_BITS'(row_count[i]);
      end
      lsb = code[0];
      if (!valid[i]) begin
        make_in[i]  = 1'b0;
        break_in[i] = 1'b0;
      end else if (is_xor[i]) begin
        make_in[i]  = ~lsb;
        break_in[i] =  lsb;
      end else begin
        make_in[i]  = (row_count[i] == CNT_W'(0));
        break_in[i] = (row_count[i] == CNT_W'(1));
      end
    end
  end

  assign any_violated = |make_in;

endmodule
