// tb_min_tree: random distances (with many ties) and random masks are
// streamed with gaps; the minimum, its position (lowest on a tie) and the
// any-valid flag are compared with values computed here, 3 cycles later.
module tb_min_tree;
  localparam int N_IN = 8, W = 64, LAT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic                in_valid = 0;
  logic [N_IN-1:0]     in_mask;
  logic [W-1:0]        in_dist [N_IN];
  logic                out_valid, out_any;
  logic [W-1:0]        out_dist;
  logic [$clog2(N_IN)-1:0] out_idx;
  min_tree #(.N_IN(N_IN), .W(W)) dut (.*);

  typedef struct { logic [63:0] d; int i; bit a; int t; } exp_t;
  int checks = 0, failures = 0, cyc = 0;
  exp_t q[$];
  always @(posedge clk) cyc++;

  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    checks++;
    if (q.size() == 0) begin failures++; $display("FAIL: unexpected output"); end
    else begin
      e = q.pop_front();
      if (out_any != e.a || (e.a && (out_dist != e.d || int'(out_idx) != e.i)) ||
          cyc - e.t != LAT) begin
        failures++;
        $display("FAIL: got %0d/%0d/%0d expected %0d/%0d/%0d", out_any, out_dist, out_idx,
                 e.a, e.d, e.i);
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      exp_t e;
      in_valid = ($urandom_range(0, 3) != 0);
      e.a = 0; e.d = 0; e.i = 0; e.t = cyc;
      for (int j = 0; j < N_IN; j++) begin
        in_mask[j] = (n % 9 == 0) ? 1'b0 : ($urandom_range(0, 4) != 0);
        in_dist[j] = (n % 2) ? W'($urandom_range(0, 6)) : {32'($urandom()), 32'($urandom())};
        if (in_mask[j] && (!e.a || in_dist[j] < e.d)) begin
          e.a = 1; e.d = in_dist[j]; e.i = j;
        end
      end
      if (in_valid) q.push_back(e);
      @(negedge clk);
    end
    in_valid = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL: results missing"); end
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
