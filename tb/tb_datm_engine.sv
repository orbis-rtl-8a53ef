// tb_datm_engine: self-checking test of the DATM engine at reduced sizes.
// Random clustered 4-bit tokens and random channel scales are loaded, the
// engine runs, and the pairs it streams out (under random back-pressure)
// are compared with the reference model in datm_ref_pkg, together with the
// iteration count and the final loss. Runs cover: a stop by the iteration
// cap, a stop by the eps threshold, a token count that is not a multiple of
// the DAU count, r = 1 and a small r.
module tb_datm_engine;
  import orbis_pkg::*;
  import datm_ref_pkg::*;

  localparam int D = 16, LANES = 4, NB = 8, N_MAX = 64, K_MAX = 16, SORT_N = 8;
  localparam int CH = D / LANES;
  localparam int IW = $clog2(N_MAX);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                       ld_q_valid = 0, ld_s_valid = 0;
  logic [IW-1:0]              ld_q_token;
  logic [$clog2(CH)-1:0]      ld_q_ch, ld_s_ch;
  logic [LANES*Q_W-1:0]       ld_q_data;
  logic [LANES*SCALE_W-1:0]   ld_s_data;
  logic                       start = 0;
  logic [IW:0]                cfg_n;
  logic [$clog2(K_MAX):0]     cfg_k;
  logic [RATIO_W:0]           cfg_ratio;
  logic [DIST_W-1:0]          cfg_eps;
  logic [7:0]                 cfg_max_iter;
  logic [15:0]                cfg_seed;
  logic                       pair_valid, pair_ready = 0, pair_last, busy, done;
  logic [IW-1:0]              pair_dst, pair_src;
  logic [DIST_W-1:0]          pair_dist, loss;
  logic [7:0]                 iterations;

  datm_engine #(.D(D), .LANES(LANES), .NB(NB), .N_MAX(N_MAX), .K_MAX(K_MAX),
                .SORT_N(SORT_N)) dut (.*);

  int checks = 0, failures = 0;
  int q[], s[];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic load(input int n);
    q = new[n * D];
    s = new[D];
    // tokens scattered around a few centres
    for (int t = 0; t < n; t++) begin
      int centre;
      centre = t % 5;
      for (int c = 0; c < D; c++) begin
        int v;
        v = ((centre * 3 + c) % 13) - 6 + int'($urandom_range(0, 2)) - 1;
        if (v > 7) v = 7;
        if (v < -8) v = -8;
        q[t * D + c] = v;
      end
    end
    for (int c = 0; c < D; c++) s[c] = int'($urandom_range(1, 65535));
    @(negedge clk);
    for (int t = 0; t < n; t++)
      for (int g = 0; g < CH; g++) begin
        ld_q_valid = 1;
        ld_q_token = IW'(t);
        ld_q_ch    = g[$clog2(CH)-1:0];
        for (int l = 0; l < LANES; l++) ld_q_data[l*Q_W +: Q_W] = Q_W'(q[t * D + g * LANES + l]);
        @(negedge clk);
      end
    ld_q_valid = 0;
    for (int g = 0; g < CH; g++) begin
      ld_s_valid = 1;
      ld_s_ch    = g[$clog2(CH)-1:0];
      for (int l = 0; l < LANES; l++) ld_s_data[l*SCALE_W +: SCALE_W] = SCALE_W'(s[g * LANES + l]);
      @(negedge clk);
    end
    ld_s_valid = 0;
  endtask

  int eps_stops = 0, cap_stops = 0, empty_clusters = 0, multi_iter = 0, stalls = 0;

  task automatic run(input int n, input int k, input int ratio, input longint eps,
                     input int max_iter, input int seed);
    pair_t  exp_p[$];
    longint exp_loss;
    int     st[3];
    int     got;
    load(n);
    run_ref: begin
      datm_ref_pkg::run(n, k, D, q, s, ratio, eps, max_iter, seed, exp_p, exp_loss, st);
    end
    cfg_n = (IW+1)'(n); cfg_k = ($clog2(K_MAX)+1)'(k); cfg_ratio = (RATIO_W+1)'(ratio);
    cfg_eps = DIST_W'(eps); cfg_max_iter = 8'(max_iter); cfg_seed = 16'(seed);
    start = 1;
    @(negedge clk);
    start = 0;
    got = 0;
    while (!done) begin
      pair_ready = ($urandom_range(0, 3) != 0);
      if (pair_valid && !pair_ready) stalls++;
      if (pair_valid && pair_ready) begin
        if (got < exp_p.size()) begin
          check(pair_src == IW'(exp_p[got].src) && pair_dst == IW'(exp_p[got].dst) &&
                pair_dist == DIST_W'(exp_p[got].pdist),
                $sformatf("pair %0d: got src %0d dst %0d dist %0d, expected %0d %0d %0d",
                          got, pair_src, pair_dst, pair_dist,
                          exp_p[got].src, exp_p[got].dst, exp_p[got].pdist));
          check(pair_last == (got == exp_p.size() - 1), "pair_last position");
        end
        got++;
      end
      @(negedge clk);
    end
    pair_ready = 0;
    check(got == exp_p.size(), $sformatf("pair count %0d, expected %0d", got, exp_p.size()));
    check(int'(iterations) == st[0], $sformatf("iterations %0d, expected %0d", iterations, st[0]));
    check(loss == DIST_W'(exp_loss), $sformatf("loss %0d, expected %0d", loss, exp_loss));
    if (st[2] != 0) eps_stops++; else cap_stops++;
    if (st[1] != 0) empty_clusters++;
    if (st[0] > 1) multi_iter++;
    $display("run n=%0d k=%0d: %0d pairs, %0d iterations, loss %0d, ref stats %0d %0d %0d", n, k, got, iterations, loss, st[0], st[1], st[2]);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(40, 8, 32768, 0, 5, 16'h1234);           // iteration cap
    run(64, 16, 40000, 64'h7fffffffffff, 6, 16'h0bad);  // eps stop after 2 passes
    run(37, 5, 65536, 1, 8, 16'h7777);           // ragged n, r = 1
    run(21, 3, 9000, 0, 3, 16'h00a5);            // few dsts, small r
    run(48, 8, 30000, 0, 1, 16'h4321);           // single pass: cap stop
    check(eps_stops > 0 && cap_stops > 0, "both stop conditions exercised");
    check(multi_iter > 0, "dst update exercised");
    check(stalls > 0, "output back-pressure exercised");
    $display("empty clusters seen in %0d runs", empty_clusters);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
