// noise_gen_tb: self-checking test of the Gaussian noise generator.
// 1. After reset (uniform table) and after seeding, every output is compared
//    with a testbench model of the xorshift64 generators and the alias
//    sampler, written from the specification, over many steps.
// 2. A Gaussian alias table (64 bins of width 1/8 sigma, built here with
//    Vose's algorithm from exp(-v^2/2)) is written; the model is checked
//    again, and the sample mean and standard deviation over 2000 steps must
//    match 0 and sigma = 2.5 (the paper's noise level for MDP).
// 3. sigma = 0 must give zero noise; step = 0 must hold the samples.
module noise_gen_tb;
  import walksat_pkg::*;
  localparam int N = 10;
  localparam int G = (N + 3) / 4;
  logic clk = 0, rst_n = 0, seed_load = 0, step = 0, alias_we = 0;
  logic [63:0] seed = '0;
  logic [ALIAS_IDX_W-1:0] alias_addr = '0, alias_idx = '0;
  logic [ALIAS_PROB_W-1:0] alias_thresh = '0;
  logic [SIGMA_W-1:0] sigma = '0;
  logic signed [NOISE_W-1:0] noise [N];
  int checks = 0, failures = 0;

  logic [63:0] m_state [G];
  int m_thresh [64];
  int m_alias [64];

  noise_gen #(.N_VARS(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] m_next(logic [63:0] s);
    s ^= s << 13;
    s ^= s >> 7;
    s ^= s << 17;
    return s;
  endfunction

  function automatic logic [63:0] m_seed(logic [63:0] sd, int g);
    logic [63:0] t;
    t = sd ^ (64'h9E3779B97F4A7C15 * 64'(g + 1));
    return (t == 0) ? 64'h0123456789ABCDEF : t;
  endfunction

  function automatic int m_noise(int j);
    logic [15:0] r;
    int col, u, bin, code;
    r = m_state[j / 4][16 * (j % 4) +: 16];
    col = int'(r[5:0]);
    u = int'(r[13:6]);
    bin = (u < m_thresh[col]) ? col : m_alias[col];
    code = 2 * bin - 63;
    // arithmetic shift right by 4 (floor division by 16)
    return (code * int'(sigma)) >>> 4;
  endfunction

  task automatic compare(string tag);
    for (int j = 0; j < N; j++) begin
      checks++;
      if (int'(noise[j]) != m_noise(j)) begin
        failures++;
        $display("FAIL %s var %0d noise %0d exp %0d", tag, j, noise[j], m_noise(j));
      end
    end
  endtask

  task automatic do_step();
    @(negedge clk); step = 1;
    @(negedge clk); step = 0;
    for (int g = 0; g < G; g++) m_state[g] = m_next(m_state[g]);
    #1;
  endtask

  // Vose's alias method for the discretised standard normal
  task automatic build_gaussian_table();
    real p [64];
    real q [64];
    real tot;
    int small_l [64];
    int large_l [64];
    int ns, nl;
    tot = 0.0;
    for (int k = 0; k < 64; k++) begin
      real v;
      v = real'(2 * k - 63) / 16.0;
      p[k] = $exp(-v * v / 2.0);
      tot += p[k];
    end
    ns = 0; nl = 0;
    for (int k = 0; k < 64; k++) begin
      q[k] = p[k] / tot * 64.0;
      if (q[k] < 1.0) begin small_l[ns] = k; ns++; end
      else begin large_l[nl] = k; nl++; end
    end
    while (ns > 0 && nl > 0) begin
      int s, l;
      ns--; s = small_l[ns];
      nl--; l = large_l[nl];
      m_thresh[s] = int'(q[s] * 256.0);
      m_alias[s] = l;
      q[l] = q[l] + q[s] - 1.0;
      if (q[l] < 1.0) begin small_l[ns] = l; ns++; end
      else begin large_l[nl] = l; nl++; end
    end
    while (nl > 0) begin nl--; m_thresh[large_l[nl]] = 256; m_alias[large_l[nl]] = large_l[nl]; end
    while (ns > 0) begin ns--; m_thresh[small_l[ns]] = 256; m_alias[small_l[ns]] = small_l[ns]; end
    for (int k = 0; k < 64; k++) begin
      @(negedge clk);
      alias_we = 1; alias_addr = 6'(k);
      alias_thresh = 9'(m_thresh[k]); alias_idx = 6'(m_alias[k]);
    end
    @(negedge clk); alias_we = 0;
  endtask

  initial begin
    real sum, sum2, mean, sd;
    int cnt;
    for (int k = 0; k < 64; k++) begin m_thresh[k] = 256; m_alias[k] = k; end
    for (int g = 0; g < G; g++) m_state[g] = m_seed(64'd0, g);
    sigma = 8'd16;                       // 1.0
    repeat (2) @(negedge clk);
    rst_n = 1;
    #1 compare("reset");
    for (int t = 0; t < 20; t++) begin do_step(); compare("uniform"); end
    // seeding
    @(negedge clk); seed = 64'hDEADBEEF_12345678; seed_load = 1;
    @(negedge clk); seed_load = 0;
    for (int g = 0; g < G; g++) m_state[g] = m_seed(seed, g);
    #1 compare("seeded");
    // hold without step
    repeat (3) @(negedge clk);
    #1 compare("hold");
    // Gaussian table, sigma 2.5 = 40/16
    build_gaussian_table();
    sigma = 8'd40;
    #1 compare("gauss");
    sum = 0; sum2 = 0; cnt = 0;
    for (int t = 0; t < 2000; t++) begin
      do_step();
      if (t < 50) compare("gauss");
      for (int j = 0; j < N; j++) begin
        real v;
        v = real'(noise[j]) / 16.0;
        sum += v; sum2 += v * v; cnt++;
      end
    end
    mean = sum / cnt;
    sd = $sqrt(sum2 / cnt - mean * mean);
    $display("noise statistics: mean %f sd %f over %0d samples", mean, sd, cnt);
    checks++;
    if (mean > 0.1 || mean < -0.1) begin failures++; $display("FAIL mean %f", mean); end
    checks++;
    if (sd < 2.35 || sd > 2.65) begin failures++; $display("FAIL sd %f", sd); end
    sigma = 8'd0;
    #1;
    for (int j = 0; j < N; j++) begin
      checks++;
      if (noise[j] !== '0) begin failures++; $display("FAIL sigma 0 gives %0d", noise[j]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
