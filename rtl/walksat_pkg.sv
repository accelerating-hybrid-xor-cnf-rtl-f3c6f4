// walksat_pkg: shared constants, types and small functions of the WalkSAT-XNF
// in-memory solver.
//
// The array sizes default to 250 variables and 500 clauses, the capacity the
// paper quotes for one crossbar array of present-day in-memory hardware. The
// XOR-clause ADC resolution (4 bits, i.e. up to 15 true literals) and the
// XORSHIFT-64 noise generator follow the paper. The fixed-point format of the
// gradients (4 fraction bits), the alias-table size (64 bins of width 1/8 over
// [-4, 4) standard deviations) and the sigma format (unsigned Q4.4) are this
// design's own choices.
package walksat_pkg;

  // ---- problem capacity (paper: ~250 variables, ~500 clauses per array) ----
  localparam int unsigned DEF_N_VARS    = 250;
  localparam int unsigned DEF_N_CLAUSES = 500;

  // ---- clause evaluation ----
  localparam int unsigned DEF_ADC_BITS  = 4;    // paper: 4-bit ADC, up to 15 literals

  // ---- iteration counter (paper caps a run at 1e9 flips -> 30 bits) ----
  localparam int unsigned ITER_W        = 32;

  // ---- fixed point of gradients and noise ----
  localparam int unsigned FRAC_BITS     = 4;    // gradient LSB = 1/16
  localparam int unsigned SIGMA_W       = 8;    // sigma, unsigned Q4.4 (0 .. 15.94)

  // ---- alias-method Gaussian sampler ----
  localparam int unsigned ALIAS_IDX_W   = 6;
  localparam int unsigned ALIAS_BINS    = 1 << ALIAS_IDX_W;  // 64 bins
  localparam int unsigned ALIAS_PROB_W  = 9;    // threshold 0..256 (256 = keep bin)
  localparam int unsigned ALIAS_U_W     = 8;    // uniform compare word
  localparam int unsigned SAMPLE_BITS   = 16;   // random bits consumed per sample
  localparam int unsigned SAMPLES_PER_WORD = 64 / SAMPLE_BITS;
  // Bin k stands for the value (2k - 63)/16 standard deviations.
  localparam int unsigned NCODE_W       = 7;    // signed bin value code, -63..63
  // Noise sample = code * sigma / 16, in gradient units (LSB 1/16): |n| <= 63*255/16.
  localparam int unsigned NOISE_W       = 12;

  // Width of a signed gradient for make/break counts of mb_w bits.
  function automatic int unsigned grad_width(input int unsigned mb_w);
    return ((mb_w > NCODE_W) ? mb_w : NCODE_W) + FRAC_BITS + 2;
  endfunction

  // Phases of one solver iteration plus idle/done.
  typedef enum logic [2:0] {
    ST_IDLE = 3'd0,
    ST_EVAL = 3'd1,   // cycle 1: clause array + evaluation circuits
    ST_MB   = 3'd2,   // cycle 2: make/break array + gradient
    ST_WTA  = 3'd3,   // cycle 3: winner-takes-all + register update
    ST_DONE = 3'd4
  } phase_e;

  // Marsaglia xorshift64 (shifts 13, 7, 17).
  function automatic logic [63:0] xorshift64_next(input logic [63:0] s);
    logic [63:0] t;
    t = s ^ (s << 13);
    t = t ^ (t >> 7);
    t = t ^ (t << 17);
    return t;
  endfunction

  // Seed of generator g, derived from one 64-bit seed; never zero.
  function automatic logic [63:0] gen_seed(input logic [63:0] seed, input int unsigned g);
    logic [63:0] t;
    t = seed ^ (64'h9E37_79B9_7F4A_7C15 * 64'(g + 1));
    if (t == 64'd0) t = 64'h0123_4567_89AB_CDEF;
    return t;
  endfunction

endpackage
