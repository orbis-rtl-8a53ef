// tb_bitonic_sorter: random blocks (some full of duplicates) are pushed
// every cycle or with gaps; each output block must be the ascending sort of
// its input block, computed here, and appear 10 cycles later (N = 16).
module tb_bitonic_sorter;
  localparam int N = 16, W = 20, LAT = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic         in_valid = 0, out_valid;
  logic [W-1:0] in_data [N], out_data [N];
  bitonic_sorter #(.N(N), .W(W)) dut (.*);

  typedef logic [W-1:0] blk_t [N];
  int checks = 0, failures = 0, cyc = 0;
  logic [N*W-1:0] q[$];
  int   t_q[$];
  always @(posedge clk) cyc++;

  always @(negedge clk) if (rst_n && out_valid) begin
    blk_t e;
    bit ok;
    checks++;
    if (q.size() == 0) begin failures++; $display("FAIL: unexpected block"); end
    else begin
      begin
        logic [N*W-1:0] f;
        f = q.pop_front();
        for (int i = 0; i < N; i++) e[i] = f[i*W +: W];
      end
      ok = (cyc - t_q.pop_front() == LAT);
      for (int i = 0; i < N; i++) if (out_data[i] != e[i]) ok = 0;
      if (!ok) begin failures++; $display("FAIL: block mismatch %0h %0h %0h %0h", out_data[0], e[0], out_data[15], e[15]); end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 200; b++) begin
      blk_t e;
      in_valid = (b < 40) || ($urandom_range(0, 2) != 0);
      for (int i = 0; i < N; i++)
        in_data[i] = (b % 5 == 0) ? W'($urandom_range(0, 3)) : W'($urandom());
      e = in_data;
      // insertion sort
      for (int i = 1; i < N; i++)
        for (int j = i; j > 0 && e[j-1] > e[j]; j--) begin
          logic [W-1:0] t;
          t = e[j]; e[j] = e[j-1]; e[j-1] = t;
        end
      if (in_valid) begin
        logic [N*W-1:0] f;
        for (int i = 0; i < N; i++) f[i*W +: W] = e[i];
        q.push_back(f);
        t_q.push_back(cyc);
      end
      @(negedge clk);
    end
    in_valid = 0;
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL: blocks missing"); end
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
