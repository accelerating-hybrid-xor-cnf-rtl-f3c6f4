// noise_gen: Gaussian noise source for the gradients (PRNG of block 5).
//
// The paper generates the noise with an XORSHIFT-64 pseudo-random number
// generator and turns its output into normally distributed numbers with the
// alias method. This module does the same in digital form and delivers one
// noise sample per variable for every iteration:
//   * NUM_GEN = ceil(N_VARS/4) xorshift64 generators (shifts 13, 7, 17). Each
//     64-bit state is cut into four 16-bit words, one per variable.
//   * Alias sampler per word: bits [5:0] pick one of 64 equiprobable columns k,
//     bits [13:6] are a uniform u in 0..255. The sample is bin k if
//     u < thresh[k], else bin alias[k]. Bin b stands for the standard-normal
//     value (2b-63)/16, i.e. the centre of [(b-32)/8, (b-31)/8).
//   * Scaling: noise = ((2b-63) * sigma) >>> 4, with sigma in unsigned Q4.4,
//     so noise is in units of 1/16 like the gradients.
// The paper does not give the table or the number of generators; the table
// is written by the host (alias_we), computed from the target distribution
// with Vose's algorithm. After reset every column keeps its own bin
// (thresh = 256), a uniform distribution over [-4, 4).
// Timing: seed_load (re)seeds all generators from one 64-bit seed; step
// advances all of them by one xorshift step at the next clock edge. The
// noise outputs are combinational from the current states and the table.
module noise_gen #(
  parameter int unsigned N_VARS = walksat_pkg::DEF_N_VARS,
  localparam int unsigned NUM_GEN = (N_VARS + walksat_pkg::SAMPLES_PER_WORD - 1)
                                    / walksat_pkg::SAMPLES_PER_WORD
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   seed_load,
  input  logic [63:0]                            seed,
  input  logic                                   step,
  input  logic                                   alias_we,
  input  logic [walksat_pkg::ALIAS_IDX_W-1:0]    alias_addr,
  input  logic [walksat_pkg::ALIAS_PROB_W-1:0]   alias_thresh,
  input  logic [walksat_pkg::ALIAS_IDX_W-1:0]    alias_idx,
  input  logic [walksat_pkg::SIGMA_W-1:0]        sigma,
  output logic signed [walksat_pkg::NOISE_W-1:0] noise [N_VARS]
);
  import walksat_pkg::*;

  logic [63:0]             state  [NUM_GEN];
  logic [ALIAS_PROB_W-1:0] thresh [ALIAS_BINS];
  logic [ALIAS_IDX_W-1:0]  alias_tab [ALIAS_BINS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < int'(NUM_GEN); g++) state[g] <= gen_seed(64'd0, g);
    end else if (seed_load) begin
      for (int g = 0; g < int'(NUM_GEN); g++) state[g] <= gen_seed(seed, g);
    end else if (step) begin
      for (int g = 0; g < int'(NUM_GEN); g++) state[g] <= xorshift64_next(state[g]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(ALIAS_BINS); k++) begin
        thresh[k]    <= ALIAS_PROB_W'(1 << ALIAS_U_W);
        alias_tab[k] <= ALIAS_IDX_W'(k);
      end
    end else if (alias_we) begin
      thresh[alias_addr]    <= alias_thresh;
      alias_tab[alias_addr] <= alias_idx;
    end
  end

  always_comb begin
    for (int j = 0; j < int'(N_VARS); j++) begin
      logic [SAMPLE_BITS-1:0]    r;
      logic [ALIAS_IDX_W-1:0]    col, bin;
      logic [ALIAS_U_W-1:0]      u;
      logic signed [NCODE_W:0]   code;
      logic signed [NCODE_W+SIGMA_W:0] prod;
      r    = state[j / SAMPLES_PER_WORD][SAMPLE_BITS*(j % SAMPLES_PER_WORD) +: SAMPLE_BITS];
      col  = r[ALIAS_IDX_W-1:0];
      u    = r[ALIAS_IDX_W +: ALIAS_U_W];
      bin  = (ALIAS_PROB_W'(u) < thresh[col]) ? col : alias_tab[col];
      code = $signed({1'b0, bin, 1'b0}) - $signed((NCODE_W+1)'(ALIAS_BINS - 1));
      prod = code * $signed({1'b0, sigma});
      noise[j] = NOISE_W'(prod >>> FRAC_BITS);
    end
  end

endmodule
