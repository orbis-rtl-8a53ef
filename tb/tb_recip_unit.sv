// tb_recip_unit: reciprocals of edge and random divisors are compared with
// floor(2^24 / d) (all ones for d = 0), and each must take 26 cycles from
// start to done (P + 2 cycles).
module tb_recip_unit;
  localparam int DW = 16, P = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic          start = 0, busy, done;
  logic [DW-1:0] d;
  logic [P:0]    q;
  recip_unit #(.DW(DW), .P(P)) dut (.*);

  int checks = 0, failures = 0;
  task automatic one(input int dv);
    longint e;
    int cycles;
    e = (dv == 0) ? (longint'(1) << (P + 1)) - 1 : (longint'(1) << P) / dv;
    d = DW'(dv); start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (q != (P+1)'(e)) begin failures++; $display("FAIL: d=%0d q=%0d expected %0d", dv, q, e); end
    if (dv != 0) begin
      checks++;
      if (cycles != P + 2) begin failures++; $display("FAIL: d=%0d took %0d cycles", dv, cycles); end
    end
    @(negedge clk);
  endtask
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    one(1); one(2); one(3); one(7); one(0); one(65535); one(32768); one(1000);
    for (int i = 0; i < 60; i++) one(int'($urandom_range(1, 65535)));
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
