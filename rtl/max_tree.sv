// max_tree: pipelined comparator tree returning the largest magnitude among
// N_IN signed activations (the "Max Tree" of the quantization engine).
//
// Level 0 takes absolute values; each further level halves the vector with
// greater-than comparators and is registered, so the result appears
// $clog2(N_IN) cycles after in_valid, one new vector accepted per cycle.
// The tree shape (pairwise reduction of eight inputs) follows the drawing of
// the engine; the register after every level is this design's choice.
module max_tree #(
  parameter int N_IN = 8,
  parameter int W    = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_data [N_IN],
  output logic                out_valid,
  output logic        [W-1:0] out_max
);
  localparam int LV = $clog2(N_IN);

  for (genvar l = 0; l <= LV; l++) begin : g_lv
    logic [W-1:0] v [N_IN >> l];
    logic         vld;
    if (l == 0) begin : g_abs
      always_comb begin
        for (int i = 0; i < N_IN; i++) begin
          v[i] = in_data[i][W-1] ? W'(-in_data[i]) : W'(in_data[i]);
        end
      end
      assign vld = in_valid;
    end else begin : g_cmp
      always_ff @(posedge clk) begin
        for (int i = 0; i < (N_IN >> l); i++) begin
          v[i] <= (g_lv[l-1].v[2*i] > g_lv[l-1].v[2*i+1]) ? g_lv[l-1].v[2*i]
                                                           : g_lv[l-1].v[2*i+1];
        end
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) vld <= 1'b0;
        else        vld <= g_lv[l-1].vld;
      end
    end
  end

  assign out_valid = g_lv[LV].vld;
  assign out_max   = g_lv[LV].v[0];
endmodule
