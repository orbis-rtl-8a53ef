// tb_topk_unit: lists of 0 to 256 random words (with duplicates) are
// loaded, and for a random keep count the unit must return the keep
// smallest words in ascending order, with out_last on the last one, under
// random back-pressure. List lengths cover a single block, several merge
// passes and a ragged tail.
module tb_topk_unit;
  localparam int W = 24, MAX = 256, N = 16;
  localparam int CW = $clog2(MAX + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic          clear = 0, in_valid = 0, go = 0, busy, out_valid, out_ready = 0;
  logic          out_last, done;
  logic [W-1:0]  in_data, out_data;
  logic [CW-1:0] keep, count;
  topk_unit #(.W(W), .MAX(MAX), .N(N)) dut (.*);

  int checks = 0, failures = 0;

  task automatic one(input int m, input int k);
    logic [W-1:0] v[$];
    int got, kk;
    @(negedge clk);
    clear = 1;
    @(negedge clk);
    clear = 0;
    for (int i = 0; i < m; i++) begin
      in_valid = 1;
      in_data  = (i % 3 == 0) ? W'($urandom_range(0, 20)) : W'($urandom());
      v.push_back(in_data);
      @(negedge clk);
    end
    in_valid = 0;
    v.sort();
    kk = (k < m) ? k : m;
    keep = CW'(k); go = 1;
    @(negedge clk);
    go = 0;
    got = 0;
    while (!done) begin
      out_ready = ($urandom_range(0, 2) != 0);
      if (out_valid && out_ready) begin
        checks++;
        if (got >= kk || out_data != v[got] || out_last != (got == kk - 1)) begin
          failures++;
          $display("FAIL: m=%0d k=%0d word %0d got %0h expected %0h", m, k, got, out_data,
                   got < kk ? v[got] : 0);
        end
        got++;
      end
      @(negedge clk);
    end
    out_ready = 0;
    checks++;
    if (got != kk) begin failures++; $display("FAIL: m=%0d k=%0d returned %0d", m, k, got); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    one(10, 4); one(16, 16); one(256, 100); one(200, 256); one(33, 1); one(0, 3);
    one(129, 65); one(77, 77);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
