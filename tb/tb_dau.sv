// tb_dau: distances over random 4-bit tokens of 1 to 9 channel groups are
// fed back to back and with gaps; each result is compared with the scaled
// squared L2 distance computed here and must arrive 4 cycles after the
// last group of its tokens.
module tb_dau;
  import orbis_pkg::*;
  localparam int LANES = 4, LAT = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic                      in_valid = 0, in_first = 0, in_last = 0;
  logic signed [Q_W-1:0]     qa [LANES], qb [LANES];
  logic        [SCALE_W-1:0] scale [LANES];
  logic                      dist_valid;
  logic [DIST_W-1:0]         distance;
  dau #(.LANES(LANES)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  longint exp_q[$];
  int     t_q[$];
  always @(posedge clk) cyc++;

  always @(negedge clk) if (rst_n && dist_valid) begin
    checks++;
    if (exp_q.size() == 0 || distance != DIST_W'(exp_q[0]) || cyc - t_q[0] != LAT) begin
      failures++;
      $display("FAIL: got %0d expected %0d", distance, exp_q.size() ? exp_q[0] : -1);
    end
    if (exp_q.size()) begin void'(exp_q.pop_front()); void'(t_q.pop_front()); end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 120; n++) begin
      int groups;
      longint acc;
      groups = int'($urandom_range(1, 9));
      acc = 0;
      for (int g = 0; g < groups; g++) begin
        while ($urandom_range(0, 4) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_first = (g == 0); in_last = (g == groups - 1);
        for (int l = 0; l < LANES; l++) begin
          int a, b, s, t;
          a = int'($urandom_range(0, 15)) - 8;
          b = int'($urandom_range(0, 15)) - 8;
          s = (n % 7 == 0) ? 65535 : int'($urandom_range(0, 65535));
          qa[l] = Q_W'(a); qb[l] = Q_W'(b); scale[l] = SCALE_W'(s);
          t = s * (a - b);
          acc += longint'(t) * longint'(t);
        end
        if (g == groups - 1) begin exp_q.push_back(acc); t_q.push_back(cyc); end
        @(negedge clk);
      end
      in_valid = 0; in_first = 0; in_last = 0;
    end
    repeat (8) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: results missing"); end
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
