// tb_max_tree: random signed vectors, including the most negative value,
// are streamed with gaps; every result is compared with the largest
// magnitude computed here and must appear exactly 3 cycles after its input.
module tb_max_tree;
  localparam int N_IN = 8, W = 16, LAT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic                in_valid = 0;
  logic signed [W-1:0] in_data [N_IN];
  logic                out_valid;
  logic [W-1:0]        out_max;
  max_tree #(.N_IN(N_IN), .W(W)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int exp_q[$], t_q[$];
  always @(posedge clk) cyc++;

  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0 || int'(out_max) != exp_q[0] || cyc - t_q[0] != LAT) begin
      failures++;
      $display("FAIL: got %0d expected %0d latency %0d", out_max,
               exp_q.size() ? exp_q[0] : -1, t_q.size() ? cyc - t_q[0] : -1);
    end
    if (exp_q.size()) begin void'(exp_q.pop_front()); void'(t_q.pop_front()); end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      int m;
      in_valid = ($urandom_range(0, 3) != 0);
      m = 0;
      for (int j = 0; j < N_IN; j++) begin
        int v;
        v = int'($urandom_range(0, 65535)) - 32768;
        if (i % 17 == 0 && j == 5) v = -32768;
        if (i % 23 == 0) v = v % 50;
        in_data[j] = W'(v);
        if ((v < 0 ? -v : v) > m) m = (v < 0 ? -v : v);
      end
      if (in_valid) begin exp_q.push_back(m); t_q.push_back(cyc); end
      @(negedge clk);
    end
    in_valid = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
