// tb_orbis_top_full: one complete matching operation of the token-matching
// path with every parameter of orbis_top at its default (D = 3072 channels,
// 1024-token and 512-dst scratchpads). 96 tokens with 12 dsts are
// quantized by the QE and matched by the DATM engine, and the pairs are
// compared with the reference model of datm_ref_pkg, as in tb_orbis_top.
// A second, smaller run with a single pass exercises the iteration cap.
module tb_orbis_top_full;
  import orbis_pkg::*;
  import datm_ref_pkg::*;
  localparam int D = 3072, LANES = 4, NB = 8, TREE_N = 8, N_MAX = 1024, K_MAX = 512, SORT_N = 16;
  localparam int CH = D / LANES;
  localparam int IW = $clog2(N_MAX);
  localparam int GW = $clog2(CH);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                     a_valid = 0, a_first = 0, a_last = 0, r_start = 0, r_busy, r_done;
  logic [$clog2(D)-1:0]     a_ch;
  logic signed [ACT_W-1:0]  a_data [TREE_N];
  logic                     x_valid = 0;
  logic [IW-1:0]            x_token;
  logic [GW-1:0]            x_grp;
  logic signed [ACT_W-1:0]  x_data [LANES];
  logic                     start = 0;
  logic [IW:0]              cfg_n;
  logic [$clog2(K_MAX):0]   cfg_k;
  logic [RATIO_W:0]         cfg_ratio;
  logic [DIST_W-1:0]        cfg_eps;
  logic [7:0]               cfg_max_iter;
  logic [15:0]              cfg_seed;
  logic                     pair_valid, pair_ready = 0, pair_last, busy, done;
  logic [IW-1:0]            pair_dst, pair_src;
  logic [DIST_W-1:0]        pair_dist, loss;
  logic [7:0]               iterations;

  orbis_top dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_update = 0, n_eps = 0, n_cap = 0, n_empty = 0, n_trunc = 0, n_merge = 0, n_stall = 0;

  task automatic run(input int n, input int k, input int ratio, input longint eps,
                     input int max_iter, input int seed);
    int     x[], q[], s[], amax[];
    pair_t  exp_p[$];
    longint exp_loss;
    int     st[3], got, t0;
    int     nb;
    x = new[n * D]; q = new[n * D]; s = new[D]; amax = new[D];
    for (int c = 0; c < D; c++) amax[c] = 0;
    for (int t = 0; t < n; t++)
      for (int c = 0; c < D; c++) begin
        int v;
        v = (((t % 6) * 7919 + c * 104729) % 40000) - 20000 + int'($urandom_range(0, 3000)) - 1500;
        x[t * D + c] = v;
        if ((v < 0 ? -v : v) > amax[c]) amax[c] = (v < 0 ? -v : v);
      end
    for (int c = 0; c < D; c++) s[c] = amax[c];
    for (int t = 0; t < n; t++)
      for (int c = 0; c < D; c++) q[t * D + c] = quant(x[t * D + c], amax[c]);
    datm_ref_pkg::run(n, k, D, q, s, ratio, eps, max_iter, seed, exp_p, exp_loss, st);
    t0 = cyc;

    // scale pass: channel-major, TREE_N tokens per beat, zero padding
    nb = (n + TREE_N - 1) / TREE_N;
    for (int c = 0; c < D; c++)
      for (int b = 0; b < nb; b++) begin
        a_valid = 1; a_ch = ($clog2(D))'(c); a_first = (b == 0); a_last = (b == nb - 1);
        for (int j = 0; j < TREE_N; j++)
          a_data[j] = (b * TREE_N + j < n) ? ACT_W'(x[(b * TREE_N + j) * D + c]) : '0;
        @(negedge clk);
      end
    a_valid = 0; a_first = 0; a_last = 0;
    repeat (4) @(negedge clk);
    r_start = 1;
    @(negedge clk);
    r_start = 0;
    while (!r_done) @(negedge clk);
    repeat (2) @(negedge clk);
    // quantize pass: token-major
    for (int t = 0; t < n; t++)
      for (int g = 0; g < CH; g++) begin
        x_valid = 1; x_token = IW'(t); x_grp = GW'(g);
        for (int l = 0; l < LANES; l++) x_data[l] = ACT_W'(x[t * D + g * LANES + l]);
        @(negedge clk);
      end
    x_valid = 0;
    repeat (3) @(negedge clk);

    cfg_n = (IW+1)'(n); cfg_k = ($clog2(K_MAX)+1)'(k); cfg_ratio = (RATIO_W+1)'(ratio);
    cfg_eps = DIST_W'(eps); cfg_max_iter = 8'(max_iter); cfg_seed = 16'(seed);
    start = 1;
    @(negedge clk);
    start = 0;
    got = 0;
    while (!done) begin
      pair_ready = ($urandom_range(0, 3) != 0);
      if (pair_valid && !pair_ready) n_stall++;
      if (pair_valid && pair_ready) begin
        if (got < exp_p.size())
          check(pair_src == IW'(exp_p[got].src) && pair_dst == IW'(exp_p[got].dst) &&
                pair_dist == DIST_W'(exp_p[got].pdist) && pair_last == (got == exp_p.size() - 1),
                $sformatf("pair %0d: got %0d<-%0d (%0d), expected %0d<-%0d (%0d)", got,
                          pair_dst, pair_src, pair_dist, exp_p[got].dst, exp_p[got].src,
                          exp_p[got].pdist));
        got++;
      end
      @(negedge clk);
    end
    pair_ready = 0;
    check(got == exp_p.size(), $sformatf("pair count %0d, expected %0d", got, exp_p.size()));
    check(int'(iterations) == st[0], $sformatf("iterations %0d, expected %0d", iterations, st[0]));
    check(loss == DIST_W'(exp_loss), "final loss");
    if (st[0] > 1) n_update++;
    if (st[2] != 0) n_eps++; else n_cap++;
    if (st[1] != 0) n_empty++;
    if (exp_p.size() < n - k) n_trunc++;
    if (n - k > SORT_N) n_merge++;
    $display("run n=%0d k=%0d: %0d pairs, %0d passes, loss %0d, %0d cycles",
             n, k, got, iterations, loss, cyc - t0);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(96, 12, 40000, 0, 6, 16'h2468);
    run(20, 3, 65536, 0, 1, 16'h1357);
    check(n_update > 0, "dst update happened");
    check(n_merge > 0,  "top-k merge pass happened");
    $display("mechanisms: update %0d eps %0d cap %0d empty-cluster %0d truncation %0d merge %0d stall %0d",
             n_update, n_eps, n_cap, n_empty, n_trunc, n_merge, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
