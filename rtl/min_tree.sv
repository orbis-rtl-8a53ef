// min_tree: pipelined tree that finds the smallest of N_IN distances and the
// position it came from (the "Min Tree" after the distance accumulation
// units of the DATM engine).
//
// Inputs whose in_mask bit is clear take no part. Each level halves the
// candidates with less-or-equal comparators (a tie keeps the lower index)
// and is registered, so out_* follow in_valid by $clog2(N_IN) cycles.
// out_any is low when every input was masked.
module min_tree #(
  parameter int N_IN = 8,
  parameter int W    = 64
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [N_IN-1:0]             in_mask,
  input  logic [W-1:0]                in_dist [N_IN],
  output logic                        out_valid,
  output logic                        out_any,
  output logic [W-1:0]                out_dist,
  output logic [$clog2(N_IN)-1:0]     out_idx
);
  localparam int LV = $clog2(N_IN);
  localparam int IW = (LV < 1) ? 1 : LV;

  for (genvar l = 0; l <= LV; l++) begin : g_lv
    logic [W-1:0]  d [N_IN >> l];
    logic [IW-1:0] x [N_IN >> l];
    logic          m [N_IN >> l];
    logic          vld;
    if (l == 0) begin : g_in
      always_comb begin
        for (int i = 0; i < N_IN; i++) begin
          d[i] = in_dist[i];
          x[i] = IW'(i);
          m[i] = in_mask[i];
        end
      end
      assign vld = in_valid;
    end else begin : g_cmp
      always_ff @(posedge clk) begin
        for (int i = 0; i < (N_IN >> l); i++) begin
          if (g_lv[l-1].m[2*i] &&
              (!g_lv[l-1].m[2*i+1] || g_lv[l-1].d[2*i] <= g_lv[l-1].d[2*i+1])) begin
            d[i] <= g_lv[l-1].d[2*i];
            x[i] <= g_lv[l-1].x[2*i];
          end else begin
            d[i] <= g_lv[l-1].d[2*i+1];
            x[i] <= g_lv[l-1].x[2*i+1];
          end
          m[i] <= g_lv[l-1].m[2*i] | g_lv[l-1].m[2*i+1];
        end
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) vld <= 1'b0;
        else        vld <= g_lv[l-1].vld;
      end
    end
  end

  assign out_valid = g_lv[LV].vld;
  assign out_any   = g_lv[LV].m[0];
  assign out_dist  = g_lv[LV].d[0];
  assign out_idx   = g_lv[LV].x[0][LV-1:0];
endmodule
