// walksat_workloads_tb: the solver at its default size on the problem
// families whose construction can be reproduced: minimal-disagreement parity
// (MDP) and McEliece minimum-weight codeword search, each generated natively
// in XOR-CNF form, and random 3-SAT, all with a planted solution.
//
//   MDP:      find an 8-bit vector a such that a.X_i XOR y_i disagrees with at
//             most K of M samples. Each sample is one XOR clause over the
//             a-bits of X_i and an error bit e_i; "at most K errors" is a
//             sequential-counter cardinality constraint in CNF.
//             M = 16, K = 2: 8 + 16 + 30 variables, 16 XOR clauses.
//   McEliece: find a non-zero codeword c of length 16 with H c = 0 and
//             weight <= W for a random 8 x 16 parity-check matrix H. Each row
//             of H is an XOR clause (one literal negated so that "odd number
//             of true literals" means even parity); the weight bound is a
//             sequential counter; one 16-literal CNF clause excludes c = 0.
//             W = 4: 16 + 60 variables, 8 XOR clauses.
//   3-SAT:    random 3-SAT with 20 and 50 variables at 4.26 clauses per
//             variable (85 and 213 clauses), each clause redrawn until the
//             planted assignment satisfies it. Planted instances are easier
//             than uniformly drawn ones at the same ratio.
// The code length 16 and the MDP 8-bit size follow the benchmark description;
// the sample count, error bound, code dimension and weight are this test's
// choices. Each instance is solved from several random starts with the noise
// level used for its class (2.5 for MDP, 3.0 for McEliece; 2.0 for 3-SAT is
// this test's choice). Checks: the run ends, a reported solution satisfies every clause (evaluated here, not by the
// design), the cycle count from start to done is 3 per iteration plus 2 (the
// start edge and the final evaluation), and each family is solved
// at least once.
module walksat_workloads_tb;
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

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- instance store ----------------
  int ncl, nvars;
  bit c_xor [C];
  int c_k   [C];
  int c_var [C][MAXK];
  bit c_neg [C][MAXK];
  logic [N-1:0] planted;

  function automatic void add1(bit is_x, int v0, bit n0);
    c_xor[ncl] = is_x; c_k[ncl] = 1; c_var[ncl][0] = v0; c_neg[ncl][0] = n0; ncl++;
  endfunction
  function automatic void add2(int v0, bit n0, int v1, bit n1);
    c_xor[ncl] = 0; c_k[ncl] = 2; c_var[ncl][0] = v0; c_neg[ncl][0] = n0;
    c_var[ncl][1] = v1; c_neg[ncl][1] = n1; ncl++;
  endfunction
  function automatic void add3(int v0, bit n0, int v1, bit n1, int v2, bit n2);
    c_xor[ncl] = 0; c_k[ncl] = 3; c_var[ncl][0] = v0; c_neg[ncl][0] = n0;
    c_var[ncl][1] = v1; c_neg[ncl][1] = n1; c_var[ncl][2] = v2; c_neg[ncl][2] = n2; ncl++;
  endfunction

  // Sequential counter (Sinz): at most k of the m variables in[0..m-1] true.
  // Auxiliary s[i][j] (i < m-1, j < k) = "at least j+1 of in[0..i] are true",
  // allocated from variable `base`; returns the next free variable.
  function automatic int at_most(int in_v [], int m, int k, int base);
    int s [][];
    s = new[m];
    for (int i = 0; i < m - 1; i++) begin
      s[i] = new[k];
      for (int j = 0; j < k; j++) s[i][j] = base + i * k + j;
    end
    add2(in_v[0], 1, s[0][0], 0);
    for (int j = 1; j < k; j++) add1(0, s[0][j], 1);
    for (int i = 1; i < m - 1; i++) begin
      add2(in_v[i], 1, s[i][0], 0);
      add2(s[i-1][0], 1, s[i][0], 0);
      for (int j = 1; j < k; j++) begin
        add3(in_v[i], 1, s[i-1][j-1], 1, s[i][j], 0);
        add2(s[i-1][j], 1, s[i][j], 0);
      end
      add2(in_v[i], 1, s[i-1][k-1], 1);
    end
    add2(in_v[m-1], 1, s[m-2][k-1], 1);
    // planted values of the auxiliaries
    begin
      int cnt;
      cnt = 0;
      for (int i = 0; i < m - 1; i++) begin
        if (planted[in_v[i]]) cnt++;
        for (int j = 0; j < k; j++) planted[s[i][j]] = (cnt >= j + 1);
      end
    end
    return base + (m - 1) * k;
  endfunction

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

  // ---------------- generators ----------------
  task automatic gen_mdp(int nb, int m, int k);
    int e_v [];
    int err_pos [];
    ncl = 0; planted = '0;
    for (int j = 0; j < nb; j++) planted[j] = 1'($urandom);
    e_v = new[m];
    for (int i = 0; i < m; i++) e_v[i] = nb + i;
    // choose up to k disagreeing samples
    err_pos = new[k];
    for (int t = 0; t < k; t++) err_pos[t] = int'($urandom % m);
    for (int i = 0; i < m; i++) begin
      bit is_err, par;
      is_err = 0;
      for (int t = 0; t < k; t++) if (err_pos[t] == i) is_err = 1;
      planted[e_v[i]] = is_err;
      // XOR clause over {a_j : X_ij = 1} and e_i; polarity of e_i sets y_i
      c_xor[ncl] = 1; c_k[ncl] = 0;
      for (int j = 0; j < nb; j++) if ($urandom % 2) begin
        c_var[ncl][c_k[ncl]] = j; c_neg[ncl][c_k[ncl]] = 0; c_k[ncl]++;
      end
      c_var[ncl][c_k[ncl]] = e_v[i]; c_neg[ncl][c_k[ncl]] = 0; c_k[ncl]++;
      par = (true_lits(ncl, planted) % 2 == 1);
      if (!par) c_neg[ncl][c_k[ncl] - 1] = 1;
      ncl++;
    end
    nvars = at_most(e_v, m, k, nb + m);
  endtask

  task automatic gen_mceliece(int n, int r, int w);
    int c_v [];
    int supp [];
    int ns;
    ncl = 0; planted = '0;
    // planted codeword of weight w
    supp = new[w];
    ns = 0;
    while (ns < w) begin
      int v;
      bit dup;
      v = int'($urandom % n);
      dup = 0;
      for (int t = 0; t < ns; t++) if (supp[t] == v) dup = 1;
      if (!dup) begin supp[ns] = v; ns++; planted[v] = 1; end
    end
    // parity checks: random row, fixed so that the row has even overlap with c
    for (int i = 0; i < r; i++) begin
      logic [31:0] row;
      int ov;
      row = $urandom & ((32'd1 << n) - 1);
      if (row == 0) row = 32'd3;
      ov = 0;
      for (int j = 0; j < n; j++) if (row[j] && planted[j]) ov++;
      if (ov % 2 == 1) row[supp[0]] = !row[supp[0]];
      if (row == 0) row[supp[0]] = 1'b1;
      if (row == 32'(1) << supp[0]) row[supp[1]] = 1'b1;
      c_xor[ncl] = 1; c_k[ncl] = 0;
      for (int j = 0; j < n; j++) if (row[j]) begin
        c_var[ncl][c_k[ncl]] = j; c_neg[ncl][c_k[ncl]] = 0; c_k[ncl]++;
      end
      c_neg[ncl][0] = 1;    // ~c XOR ... = 1  <=>  parity of the row = 0
      ncl++;
    end
    // not the zero word
    c_xor[ncl] = 0; c_k[ncl] = n;
    for (int j = 0; j < n; j++) begin c_var[ncl][j] = j; c_neg[ncl][j] = 0; end
    ncl++;
    c_v = new[n];
    for (int j = 0; j < n; j++) c_v[j] = j;
    nvars = at_most(c_v, n, w, n);
  endtask

  // Random 3-SAT with a planted solution: m clauses of 3 distinct variables
  // with random signs, a clause being drawn again while the planted
  // assignment falsifies it.
  task automatic gen_3sat(int nv, int m);
    ncl = 0; planted = '0;
    for (int j = 0; j < nv; j++) planted[j] = 1'($urandom);
    for (int i = 0; i < m; i++) begin
      int v0, v1, v2;
      bit n0, n1, n2;
      do begin
        v0 = int'($urandom % nv);
        do v1 = int'($urandom % nv); while (v1 == v0);
        do v2 = int'($urandom % nv); while (v2 == v0 || v2 == v1);
        n0 = 1'($urandom); n1 = 1'($urandom); n2 = 1'($urandom);
      end while (planted[v0] == n0 && planted[v1] == n1 && planted[v2] == n2);
      add3(v0, n0, v1, n1, v2, n2);
    end
    nvars = nv;
  endtask

  // ---------------- driving the design ----------------
  task automatic load_gaussian_table();
    real p [64]; real q [64]; real tot;
    int th [64]; int al [64];
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
      th[s] = int'(q[s] * 256.0); al[s] = l;
      q[l] = q[l] + q[s] - 1.0;
      if (q[l] < 1.0) begin sl[ns] = l; ns++; end else begin ll[nl] = l; nl++; end
    end
    while (nl > 0) begin nl--; th[ll[nl]] = 256; al[ll[nl]] = ll[nl]; end
    while (ns > 0) begin ns--; th[sl[ns]] = 256; al[sl[ns]] = sl[ns]; end
    for (int k = 0; k < 64; k++) begin
      @(negedge clk);
      alias_we = 1; alias_addr = 6'(k); alias_thresh = 9'(th[k]); alias_idx = 6'(al[k]);
    end
    @(negedge clk); alias_we = 0;
  endtask

  task automatic program_rows(int upto);
    for (int i = 0; i < upto; i++) begin
      logic [2*N-1:0] l;
      l = '0;
      if (i < ncl) for (int t = 0; t < c_k[i]; t++) l[2 * c_var[i][t] + int'(c_neg[i][t])] = 1'b1;
      @(negedge clk);
      prog_we = 1; prog_addr = AW'(i); prog_lits = l;
      prog_is_xor = (i < ncl) ? c_xor[i] : 1'b0; prog_valid = (i < ncl);
    end
    @(negedge clk); prog_we = 0;
  endtask

  task automatic run_solver(string tag, int sg, int limit, output bit solved, output int iters);
    logic [N-1:0] x0;
    int cycles;
    x0 = '0;
    for (int j = 0; j < nvars; j++) x0[j] = 1'($urandom);
    @(negedge clk); init_we = 1; init_x = x0;
    @(negedge clk); init_we = 0;
    sigma = SIGMA_W'(sg); seed = {$urandom, $urandom}; max_iter = ITER_W'(limit);
    start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    solved = sat; iters = int'(iter_count);
    checks++;
    if (cycles != 3 * iters + 2) begin
      failures++; $display("FAIL %s: %0d cycles for %0d iterations", tag, cycles, iters);
    end
    checks++;
    if (sat && !exactly_sat(x)) begin failures++; $display("FAIL %s: reported solution is wrong", tag); end
    checks++;
    if (!sat && iters != limit) begin failures++; $display("FAIL %s: stopped early without a solution", tag); end
    $display("%s: %s after %0d iterations (%0d ns at 6 ns per iteration)", tag,
             sat ? "solved" : "not solved", iters, iters * 6);
  endtask

  initial begin
    bit solved;
    int iters, prev, n_mdp, n_mce, n_3sat;
    void'($urandom(32'd777));
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_gaussian_table();
    prev = 0; n_mdp = 0; n_mce = 0; n_3sat = 0;
    for (int inst = 0; inst < 3; inst++) begin
      gen_mdp(8, 16, 2);
      checks++;
      if (!exactly_sat(planted)) begin failures++; $display("FAIL MDP generator"); end
      $display("MDP instance %0d: %0d variables, %0d clauses", inst, nvars, ncl);
      program_rows((ncl > prev) ? ncl : prev); prev = ncl;
      for (int r = 0; r < 3; r++) begin
        run_solver($sformatf("MDP %0d run %0d", inst, r), 40, 100000, solved, iters);
        if (solved) n_mdp++;
      end
    end
    for (int inst = 0; inst < 3; inst++) begin
      gen_mceliece(16, 8, 4);
      checks++;
      if (!exactly_sat(planted)) begin failures++; $display("FAIL McEliece generator"); end
      $display("McEliece instance %0d: %0d variables, %0d clauses", inst, nvars, ncl);
      program_rows((ncl > prev) ? ncl : prev); prev = ncl;
      for (int r = 0; r < 3; r++) begin
        run_solver($sformatf("McEliece %0d run %0d", inst, r), 48, 100000, solved, iters);
        if (solved) n_mce++;
      end
    end
    for (int inst = 0; inst < 2; inst++) begin
      int nv;
      nv = (inst == 0) ? 20 : 50;
      gen_3sat(nv, (nv * 426) / 100);
      checks++;
      if (!exactly_sat(planted)) begin failures++; $display("FAIL 3-SAT generator"); end
      $display("3-SAT instance %0d: %0d variables, %0d clauses", inst, nvars, ncl);
      program_rows((ncl > prev) ? ncl : prev); prev = ncl;
      for (int r = 0; r < 3; r++) begin
        run_solver($sformatf("3-SAT %0d run %0d", inst, r), 32, 100000, solved, iters);
        if (solved) n_3sat++;
      end
    end
    checks++; if (n_3sat == 0) begin failures++; $display("FAIL no 3-SAT instance solved"); end
    checks++; if (n_mdp == 0) begin failures++; $display("FAIL no MDP instance solved"); end
    checks++; if (n_mce == 0) begin failures++; $display("FAIL no McEliece instance solved"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
