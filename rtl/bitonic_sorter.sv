// bitonic_sorter: pipelined bitonic sorting network (Batcher) over N
// unsigned W-bit words, ascending. Used by the top-k stage of the DATM
// engine, where each word is {distance, src index, dst index}, so the
// sort is by distance with the src index breaking ties.
//
// The network has log2(N)*(log2(N)+1)/2 columns of compare-exchange
// elements; each column is registered, so a new block of N words is accepted
// every cycle and leaves LAT cycles later. The network type follows the
// paper; the block size N and the register per column are this design's.
module bitonic_sorter #(
  parameter int N = 16,
  parameter int W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in_data  [N],
  output logic         out_valid,
  output logic [W-1:0] out_data [N]
);
  localparam int LG  = $clog2(N);
  localparam int LAT = LG * (LG + 1) / 2;

  // (k, j) of compare-exchange column s, in network order
  function automatic int col_k(input int s);
    int c;
    c = 0;
    for (int k = 2; k <= N; k = k * 2)
      for (int j = k / 2; j > 0; j = j / 2) begin
        if (c == s) return k;
        c++;
      end
    return 2;
  endfunction
  function automatic int col_j(input int s);
    int c;
    c = 0;
    for (int k = 2; k <= N; k = k * 2)
      for (int j = k / 2; j > 0; j = j / 2) begin
        if (c == s) return j;
        c++;
      end
    return 1;
  endfunction

  for (genvar s = 0; s <= LAT; s++) begin : g_col
    logic [W-1:0] v [N];
    logic         vld;
    if (s == 0) begin : g_in
      assign v   = in_data;
      assign vld = in_valid;
    end else begin : g_cx
      localparam int K = col_k(s - 1);
      localparam int J = col_j(s - 1);
      always_ff @(posedge clk) begin
        for (int i = 0; i < N; i++) begin
          int  l;
          logic up, lo_first;
          l  = i ^ J;
          up = ((i & K) == 0);
          // i is the lower position of the pair when i < l
          if (i < l) lo_first = 1'b1; else lo_first = 1'b0;
          if (lo_first)
            v[i] <= (up == (g_col[s-1].v[i] <= g_col[s-1].v[l]))
                    ? g_col[s-1].v[i] : g_col[s-1].v[l];
          else
            v[i] <= (up == (g_col[s-1].v[l] <= g_col[s-1].v[i]))
                    ? g_col[s-1].v[i] : g_col[s-1].v[l];
        end
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) vld <= 1'b0;
        else        vld <= g_col[s-1].vld;
      end
    end
  end

  assign out_valid = g_col[LAT].vld;
  assign out_data  = g_col[LAT].v;
endmodule
