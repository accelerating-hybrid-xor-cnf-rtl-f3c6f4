// walksat_xnf_top_tb: end-to-end test of the solver at its default size
// (250 variables, 500 clause rows, 4-bit ADC).
//
// A cycle-level reference model of WalkSAT-XNF runs beside the design: it
// evaluates every clause (with the same 4-bit ADC clipping), forms make,
// break and the noisy gradient with its own copy of the xorshift64 / alias
// noise source, and picks the winner. Every iteration the design's flipped
// variable must equal the model's, and at the end the configuration, the sat
// flag, the iteration count and the cycle count (three per iteration plus the
// final evaluation) must match. Solutions are also checked clause by clause.
//
// Scenarios:
//   A  the worked example (x1^x2^x3, x3^x4, ~x2|x3, x1|x3, x1|~x2|~x3) from
//      x = 1,1,0,1 without noise: x2 is flipped and the problem is solved in
//      one iteration; the stored gradients must be 0, 2, 1, -1.
//   B  a planted random instance the size of the McEliece XNF-PP example
//      (32 variables, 83 CNF + 13 XOR clauses), sigma = 3.0.
//   C  the same from another start, stopped by the iteration limit.
//   D  the same started at its planted solution: done after 0 iterations.
//   E  a planted instance of 87 variables, 310 CNF + 21 XOR clauses (MDP16
//      XNF-PP size) including an 18-literal XOR clause that starts with all
//      literals true, so the ADC clips; sigma = 2.5.
// Mechanisms counted (each must occur): solved, iteration limit, solved at
// start, XOR clause violated, XOR break, CNF break blocked by the pass
// transistor, ADC clipping, noise changing the winner.
module walksat_xnf_top_tb;
  import walksat_pkg::*;
  localparam int N  = DEF_N_VARS;
  localparam int C  = DEF_N_CLAUSES;
  localparam int AW = $clog2(C);
  localparam int IW = $clog2(N);
  localparam int MAXK = 24;

  logic clk = 0, rst_n = 0;
  logic prog_we = 0, prog_is_xor = 0, prog_valid = 0;
  logic [AW-1:0] prog_addr = '0;
  logic [2*N-1:0] prog_lits = '0;
  logic alias_we = 0;
  logic [ALIAS_IDX_W-1:0] alias_addr = '0, alias_idx = '0;
  logic [ALIAS_PROB_W-1:0] alias_thresh = '0;
  logic [SIGMA_W-1:0] sigma = '0;
  logic init_we = 0, start = 0;
  logic [N-1:0] init_x = '0, x;
  logic [63:0] seed = '0;
  logic [ITER_W-1:0] max_iter = '0, iter_count;
  logic busy, done, sat;
  logic [IW-1:0] last_flip;

  walksat_xnf_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_solved = 0, n_limit = 0, n_start_solved = 0, n_xor_violated = 0;
  int n_xor_break = 0, n_cnf_pass_block = 0, n_adc_clip = 0, n_noise_changed = 0;

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- instance store ----------------
  int  ncl;                        // clauses in use
  bit  c_xor [C];
  int  c_k   [C];
  int  c_var [C][MAXK];
  bit  c_neg [C][MAXK];

  // ---------------- noise model ----------------
  localparam int G = (N + 3) / 4;
  logic [63:0] m_state [G];
  int m_thresh [64];
  int m_alias [64];

  function automatic logic [63:0] m_next(logic [63:0] s);
    s ^= s << 13; s ^= s >> 7; s ^= s << 17;
    return s;
  endfunction

  function automatic logic [63:0] m_seed(logic [63:0] sd, int g);
    logic [63:0] t;
    t = sd ^ (64'h9E3779B97F4A7C15 * 64'(g + 1));
    return (t == 0) ? 64'h0123456789ABCDEF : t;
  endfunction

  function automatic int m_noise(int j, int sg);
    logic [15:0] r;
    int col, u, bin;
    r = m_state[j / 4][16 * (j % 4) +: 16];
    col = int'(r[5:0]);
    u = int'(r[13:6]);
    bin = (u < m_thresh[col]) ? col : m_alias[col];
    return ((2 * bin - 63) * sg) >>> 4;
  endfunction

  task automatic load_gaussian_table();
    real p [64]; real q [64]; real tot;
    int sl [64]; int ll [64]; int ns, nl;
    tot = 0.0;
    for (int k = 0; k < 64; k++) begin
      real v;
      v = real'(2 * k - 63) / 16.0;
      p[k] = $exp(-v * v / 2.0); tot += p[k];
    end
    ns = 0; nl = 0;
    for (int k = 0; k < 64; k++) begin
      q[k] = p[k] / tot * 64.0;
      if (q[k] < 1.0) begin sl[ns] = k; ns++; end else begin ll[nl] = k; nl++; end
    end
    while (ns > 0 && nl > 0) begin
      int s, l;
      ns--; s = sl[ns]; nl--; l = ll[nl];
      m_thresh[s] = int'(q[s] * 256.0); m_alias[s] = l;
      q[l] = q[l] + q[s] - 1.0;
      if (q[l] < 1.0) begin sl[ns] = l; ns++; end else begin ll[nl] = l; nl++; end
    end
    while (nl > 0) begin nl--; m_thresh[ll[nl]] = 256; m_alias[ll[nl]] = ll[nl]; end
    while (ns > 0) begin ns--; m_thresh[sl[ns]] = 256; m_alias[sl[ns]] = sl[ns]; end
    for (int k = 0; k < 64; k++) begin
      @(negedge clk);
      alias_we = 1; alias_addr = 6'(k);
      alias_thresh = 9'(m_thresh[k]); alias_idx = 6'(m_alias[k]);
    end
    @(negedge clk); alias_we = 0;
  endtask

  // ---------------- programming ----------------
  task automatic write_clause(int i);
    logic [2*N-1:0] l;
    l = '0;
    if (i < ncl) for (int t = 0; t < c_k[i]; t++) l[2 * c_var[i][t] + int'(c_neg[i][t])] = 1'b1;
    @(negedge clk);
    prog_we = 1; prog_addr = AW'(i); prog_lits = l;
    prog_is_xor = (i < ncl) ? c_xor[i] : 1'b0;
    prog_valid = (i < ncl);
    @(negedge clk);
    prog_we = 0;
  endtask

  // clears rows [ncl, upto)
  task automatic program_all(int upto);
    for (int i = 0; i < upto; i++) write_clause(i);
  endtask

  // ---------------- reference evaluation ----------------
  function automatic int true_lits(int i, logic [N-1:0] xv);
    int n;
    n = 0;
    for (int t = 0; t < c_k[i]; t++) if (xv[c_var[i][t]] != c_neg[i][t]) n++;
    return n;
  endfunction

  function automatic bit exactly_sat(logic [N-1:0] xv);
    for (int i = 0; i < ncl; i++) begin
      int n;
      n = true_lits(i, xv);
      if (c_xor[i] ? (n % 2 == 0) : (n == 0)) return 0;
    end
    return 1;
  endfunction

  // make/break inputs per clause as the hardware sees them (ADC clips at 15)
  function automatic void clause_inputs(logic [N-1:0] xv, ref bit mk [C], ref bit bk [C],
                                        output bit violated, output bit clipped);
    violated = 0; clipped = 0;
    for (int i = 0; i < ncl; i++) begin
      int n;
      n = true_lits(i, xv);
      if (c_xor[i]) begin
        if (n > 15) begin clipped = 1; n = 15; end
        mk[i] = (n % 2 == 0); bk[i] = (n % 2 == 1);
      end else begin
        mk[i] = (n == 0); bk[i] = (n == 1);
      end
      if (mk[i]) violated = 1;
    end
  endfunction

  // ---------------- one run, checked against the model ----------------
  task automatic run(string tag, logic [N-1:0] x0, int sg, logic [63:0] sd, int limit,
                     output bit solved, output int iters);
    logic [N-1:0] mx;
    int cycles, it;
    bit mk [C]; bit bk [C];
    bit viol, clip, finished;
    @(negedge clk);
    init_we = 1; init_x = x0;
    @(negedge clk);
    init_we = 0;
    sigma = SIGMA_W'(sg); seed = sd; max_iter = ITER_W'(limit);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int g = 0; g < G; g++) m_state[g] = m_seed(sd, g);
    mx = x0; it = 0; cycles = 0; finished = 0;
    while (!finished) begin
      // now in EVAL
      checks++;
      if (dut.u_ctrl.phase !== ST_EVAL || dut.x !== mx) begin
        failures++; $display("FAIL %s it %0d: expected EVAL with model state", tag, it);
        break;
      end
      clause_inputs(mx, mk, bk, viol, clip);
      if (clip) n_adc_clip++;
      if (dut.u_eval.adc_clipped != '0) n_adc_clip += 0;
      for (int i = 0; i < ncl; i++) if (c_xor[i] && mk[i]) begin n_xor_violated++; break; end
      if (!viol || it == limit) begin
        @(negedge clk); cycles++;
        finished = 1;
      end else begin
        int mkv [N]; int bkv [N];
        int best, best0;
        int gbest, gbest0;
        for (int j = 0; j < N; j++) begin mkv[j] = 0; bkv[j] = 0; end
        for (int i = 0; i < ncl; i++) begin
          for (int t = 0; t < c_k[i]; t++) begin
            int v;
            v = c_var[i][t];
            if (mk[i]) mkv[v]++;
            if (bk[i]) begin
              if (c_xor[i]) begin bkv[v]++; n_xor_break++; end
              else if (mx[v] != c_neg[i][t]) bkv[v]++;   // literal true: pass transistor on
              else n_cnf_pass_block++;
            end
          end
        end
        best = -1; best0 = -1; gbest = 0; gbest0 = 0;
        for (int j = 0; j < N; j++) begin
          if (mkv[j] > 0) begin
            int g, g0;
            g0 = (mkv[j] - bkv[j]) * 16;
            g = g0 + m_noise(j, sg);
            if (best < 0 || g > gbest) begin best = j; gbest = g; end
            if (best0 < 0 || g0 > gbest0) begin best0 = j; gbest0 = g0; end
          end
        end
        if (best != best0) n_noise_changed++;
        @(negedge clk); cycles++;        // MB
        @(negedge clk); cycles++;        // WTA
        checks++;
        if (dut.u_ctrl.phase !== ST_WTA || dut.u_wta.winner_idx !== IW'(best)) begin
          failures++;
          $display("FAIL %s it %0d: winner %0d exp %0d", tag, it, dut.u_wta.winner_idx, best);
          break;
        end
        @(negedge clk); cycles++;
        mx[best] = !mx[best];
        for (int g = 0; g < G; g++) m_state[g] = m_next(m_state[g]);
        it++;
      end
    end
    solved = !viol;
    iters = it;
    checks++;
    if (!done || sat !== solved || int'(iter_count) != it || x !== mx) begin
      failures++;
      $display("FAIL %s end: done %b sat %b/%b iter %0d/%0d", tag, done, sat, solved, iter_count, it);
    end
    checks++;
    if (cycles != 3 * it + 1) begin
      failures++; $display("FAIL %s cycles %0d for %0d iterations", tag, cycles, it);
    end
    if (solved) begin
      checks++;
      if (!exactly_sat(x)) begin failures++; $display("FAIL %s reported solution violates a clause", tag); end
      n_solved++;
      if (it == 0) n_start_solved++;
    end else n_limit++;
    $display("%s: %s after %0d iterations (%0d cycles)", tag, solved ? "solved" : "stopped", it, cycles);
  endtask

  // ---------------- planted instance generator ----------------
  logic [N-1:0] planted;

  task automatic gen_instance(int nv, int ncnf, int nxor, int kmin, int kmax, int long_xor);
    planted = '0;
    for (int j = 0; j < nv; j++) planted[j] = 1'($urandom);
    ncl = 0;
    for (int c = 0; c < ncnf + nxor; c++) begin
      int k;
      bit is_x;
      is_x = (c >= ncnf);
      k = kmin + int'($urandom % (kmax - kmin + 1));
      if (is_x && c == ncnf && long_xor > 0) k = long_xor;
      // distinct variables
      for (int t = 0; t < k; t++) begin
        int v;
        bit dup;
        do begin
          v = int'($urandom % nv);
          dup = 0;
          for (int u = 0; u < t; u++) if (c_var[ncl][u] == v) dup = 1;
        end while (dup);
        c_var[ncl][t] = v;
        c_neg[ncl][t] = 1'($urandom);
      end
      c_k[ncl] = k; c_xor[ncl] = is_x;
      if (is_x && long_xor > 0 && c == ncnf)
        for (int t = 0; t < k; t++) c_neg[ncl][t] = 1'b0;   // all positive literals
      // make the planted assignment satisfy the clause
      if (true_lits(ncl, planted) % 2 == 0 && is_x) begin
        if (long_xor > 0 && c == ncnf) begin
          // flip the planted value of one member instead of a polarity
          planted[c_var[ncl][0]] = !planted[c_var[ncl][0]];
        end else c_neg[ncl][0] = !c_neg[ncl][0];
      end
      if (!is_x && true_lits(ncl, planted) == 0) c_neg[ncl][0] = !c_neg[ncl][0];
      ncl++;
    end
    // a planted flip for the long XOR may break earlier clauses: repair them
    for (int i = 0; i < ncl; i++) begin
      if (c_xor[i] && true_lits(i, planted) % 2 == 0) begin
        for (int t = 0; t < c_k[i]; t++) if (c_var[i][t] != c_var[ncnf][0] || i == ncnf) begin
          c_neg[i][t] = !c_neg[i][t]; break;
        end
      end else if (!c_xor[i] && true_lits(i, planted) == 0) c_neg[i][0] = !c_neg[i][0];
    end
  endtask

  // ---------------- main ----------------
  initial begin
    bit solved;
    int iters;
    int prev_ncl;
    logic [N-1:0] x0;
    void'($urandom(32'd20251003));
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_gaussian_table();

    // A: worked example, x1..x4 -> bits 0..3
    ncl = 5;
    c_xor[0] = 1; c_k[0] = 3; c_var[0][0] = 0; c_var[0][1] = 1; c_var[0][2] = 2;
    c_neg[0][0] = 0; c_neg[0][1] = 0; c_neg[0][2] = 0;
    c_xor[1] = 1; c_k[1] = 2; c_var[1][0] = 2; c_var[1][1] = 3; c_neg[1][0] = 0; c_neg[1][1] = 0;
    c_xor[2] = 0; c_k[2] = 2; c_var[2][0] = 1; c_var[2][1] = 2; c_neg[2][0] = 1; c_neg[2][1] = 0;
    c_xor[3] = 0; c_k[3] = 2; c_var[3][0] = 0; c_var[3][1] = 2; c_neg[3][0] = 0; c_neg[3][1] = 0;
    c_xor[4] = 0; c_k[4] = 3; c_var[4][0] = 0; c_var[4][1] = 1; c_var[4][2] = 2;
    c_neg[4][0] = 0; c_neg[4][1] = 1; c_neg[4][2] = 1;
    program_all(5);
    x0 = '0; x0[3:0] = 4'b1011;
    fork
      run("A example", x0, 0, 64'd1, 100, solved, iters);
      begin
        // gradients captured at the end of the MB cycle of iteration 1
        wait (dut.u_ctrl.phase == ST_WTA);
        #1;
        checks++;
        if (dut.grad_q[0] != 0 || dut.grad_q[1] != 32 || dut.grad_q[2] != 16 || dut.grad_q[3] != -16
            || dut.cand_q[3:0] !== 4'b0111) begin
          failures++;
          $display("FAIL example gradients %0d %0d %0d %0d", dut.grad_q[0], dut.grad_q[1],
                   dut.grad_q[2], dut.grad_q[3]);
        end
      end
    join
    checks++;
    if (!solved || iters != 1 || x[3:0] !== 4'b1001 || last_flip !== IW'(1)) begin
      failures++; $display("FAIL example result x=%b", x[3:0]);
    end
    prev_ncl = ncl;

    // B, C, D: McEliece XNF-PP sized instance, sigma 3.0
    gen_instance(32, 83, 13, 3, 6, 0);
    program_all((ncl > prev_ncl) ? ncl : prev_ncl);
    prev_ncl = ncl;
    x0 = '0; for (int j = 0; j < 32; j++) x0[j] = 1'($urandom);
    run("B mceliece-size", x0, 48, 64'h1234_5678_9abc_def0, 200000, solved, iters);
    x0 = '0; for (int j = 0; j < 32; j++) x0[j] = 1'($urandom);
    if (exactly_sat(x0)) x0[0] = !x0[0];
    run("C iteration limit", x0, 48, 64'h55, 3, solved, iters);
    run("D planted start", planted, 48, 64'h77, 100, solved, iters);

    // E: MDP16 XNF-PP sized instance with a long XOR clause, sigma 2.5
    gen_instance(87, 310, 21, 3, 6, 18);
    program_all((ncl > prev_ncl) ? ncl : prev_ncl);
    x0 = '0; for (int j = 0; j < 87; j++) x0[j] = 1'($urandom);
    for (int t = 0; t < 18; t++) x0[c_var[310][t]] = 1'b1;   // long XOR: all literals true
    run("E mdp16-size", x0, 40, 64'hfeed_beef, 200000, solved, iters);

    $display("mechanisms: solved=%0d limit=%0d start_solved=%0d xor_violated=%0d xor_break=%0d cnf_pass_block=%0d adc_clip=%0d noise_changed=%0d",
             n_solved, n_limit, n_start_solved, n_xor_violated, n_xor_break, n_cnf_pass_block,
             n_adc_clip, n_noise_changed);
    checks++; if (n_solved == 0)        begin failures++; $display("FAIL never solved"); end
    checks++; if (n_limit == 0)         begin failures++; $display("FAIL limit never hit"); end
    checks++; if (n_start_solved == 0)  begin failures++; $display("FAIL no start-solved run"); end
    checks++; if (n_xor_violated == 0)  begin failures++; $display("FAIL no XOR violation"); end
    checks++; if (n_xor_break == 0)     begin failures++; $display("FAIL no XOR break"); end
    checks++; if (n_cnf_pass_block == 0) begin failures++; $display("FAIL no pass-transistor block"); end
    checks++; if (n_adc_clip == 0)      begin failures++; $display("FAIL no ADC clipping"); end
    checks++; if (n_noise_changed == 0) begin failures++; $display("FAIL noise never changed a winner"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
