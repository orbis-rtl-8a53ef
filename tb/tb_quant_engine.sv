// tb_quant_engine: 24 tokens of 16 random channels (one channel all zero,
// one holding -32768, one with small values) go through the scale pass,
// the reciprocal pass and the quantize pass. The scale words must equal
// the per-channel largest magnitude computed here, in channel-group order;
// every code must equal the reference quantizer of datm_ref_pkg and arrive
// 2 cycles after its activations.
module tb_quant_engine;
  import orbis_pkg::*;
  import datm_ref_pkg::*;
  localparam int D = 16, TREE_N = 8, LANES = 4, N_MAX = 64, NT = 24;
  localparam int GW = $clog2(D / LANES);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                     a_valid = 0, a_first = 0, a_last = 0;
  logic [$clog2(D)-1:0]     a_ch;
  logic signed [ACT_W-1:0]  a_data [TREE_N];
  logic                     r_start = 0, r_busy, r_done, s_valid;
  logic [GW-1:0]            s_grp;
  logic [LANES*SCALE_W-1:0] s_data;
  logic                     x_valid = 0;
  logic [$clog2(N_MAX)-1:0] x_token;
  logic [GW-1:0]            x_grp;
  logic signed [ACT_W-1:0]  x_data [LANES];
  logic                     q_valid;
  logic [$clog2(N_MAX)-1:0] q_token;
  logic [GW-1:0]            q_grp;
  logic [LANES*Q_W-1:0]     q_data;
  quant_engine #(.D(D), .TREE_N(TREE_N), .LANES(LANES), .N_MAX(N_MAX)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int x [NT][D];
  int amax [D];
  int exp_t[$], exp_g[$], exp_c[$];
  int next_grp = 0;
  always @(posedge clk) cyc++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(negedge clk) if (rst_n) begin
    if (s_valid) begin
      bit ok;
      ok = (int'(s_grp) == next_grp);
      for (int l = 0; l < LANES; l++)
        if (int'(s_data[l*SCALE_W +: SCALE_W]) != amax[next_grp * LANES + l]) ok = 0;
      check(ok, $sformatf("scale group %0d", next_grp));
      next_grp++;
    end
    if (q_valid) begin
      bit ok;
      ok = exp_t.size() != 0 && int'(q_token) == exp_t[0] && int'(q_grp) == exp_g[0] &&
           cyc - exp_c[0] == 2;
      if (exp_t.size() != 0)
        for (int l = 0; l < LANES; l++)
          if (int'(signed'(q_data[l*Q_W +: Q_W])) !=
              quant(x[exp_t[0]][exp_g[0] * LANES + l], amax[exp_g[0] * LANES + l])) ok = 0;
      check(ok, $sformatf("codes of token %0d group %0d", q_token, q_grp));
      if (exp_t.size() != 0) begin
        void'(exp_t.pop_front()); void'(exp_g.pop_front()); void'(exp_c.pop_front());
      end
    end
  end

  initial begin
    for (int c = 0; c < D; c++) amax[c] = 0;
    for (int t = 0; t < NT; t++)
      for (int c = 0; c < D; c++) begin
        int v;
        v = int'($urandom_range(0, 65535)) - 32768;
        if (c == 3) v = 0;
        if (c == 6 && t == 13) v = -32768;
        if (c == 9) v = v % 40;
        x[t][c] = v;
        if ((v < 0 ? -v : v) > amax[c]) amax[c] = (v < 0 ? -v : v);
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // scale pass, channel-major
    for (int c = 0; c < D; c++)
      for (int b = 0; b < NT / TREE_N; b++) begin
        while ($urandom_range(0, 3) == 0) begin a_valid = 0; @(negedge clk); end
        a_valid = 1; a_ch = ($clog2(D))'(c);
        a_first = (b == 0); a_last = (b == NT / TREE_N - 1);
        for (int j = 0; j < TREE_N; j++) a_data[j] = ACT_W'(x[b * TREE_N + j][c]);
        @(negedge clk);
      end
    a_valid = 0; a_first = 0; a_last = 0;
    repeat (4) @(negedge clk);
    // reciprocal pass
    r_start = 1;
    @(negedge clk);
    r_start = 0;
    while (!r_done) @(negedge clk);
    @(negedge clk);
    check(next_grp == D / LANES, "all scale groups sent");
    // quantize pass, token-major
    for (int t = 0; t < NT; t++)
      for (int g = 0; g < D / LANES; g++) begin
        while ($urandom_range(0, 3) == 0) begin x_valid = 0; @(negedge clk); end
        x_valid = 1; x_token = ($clog2(N_MAX))'(t); x_grp = GW'(g);
        for (int l = 0; l < LANES; l++) x_data[l] = ACT_W'(x[t][g * LANES + l]);
        exp_t.push_back(t); exp_g.push_back(g); exp_c.push_back(cyc);
        @(negedge clk);
      end
    x_valid = 0;
    repeat (5) @(negedge clk);
    check(exp_t.size() == 0, "all codes returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
