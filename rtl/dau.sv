// dau: distance accumulation unit of the DATM engine.
//
// Each cycle it takes LANES channels of two 4-bit quantized tokens (a and b)
// and the LANES per-channel scale factors, and adds
//   sum over lanes of ( s_c * (a_c - b_c) )^2
// to its accumulator, so that after all channel groups of a token have passed
// it holds the scaled squared L2 distance of the two tokens. in_first starts
// a new distance, in_last marks its final channel group; dist_valid pulses
// with the finished distance LAT = 4 cycles after in_last was presented.
// Stages, as drawn for the unit: subtract and scale, square, adder tree,
// accumulate. The four lanes are the s1..s4 of that drawing; registering
// every stage is this design's choice.
module dau
  import orbis_pkg::*;
#(
  parameter int LANES = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic                      in_first,
  input  logic                      in_last,
  input  logic signed [Q_W-1:0]     qa    [LANES],
  input  logic signed [Q_W-1:0]     qb    [LANES],
  input  logic        [SCALE_W-1:0] scale [LANES],
  output logic                      dist_valid,
  output logic        [DIST_W-1:0]  distance
);
  localparam int PW = Q_W + 1 + SCALE_W + 1;  // signed scaled difference

  logic signed [PW-1:0] p1 [LANES];
  logic [DIST_W-1:0]    p2 [LANES];
  logic [DIST_W-1:0]    p3;
  logic [DIST_W-1:0]    acc;
  logic [2:0]           v_pipe, f_pipe, l_pipe;

  always_ff @(posedge clk) begin
    for (int i = 0; i < LANES; i++) begin
      // stage 1: difference of codes times the channel scale
      p1[i] <= PW'(signed'({qa[i][Q_W-1], qa[i]}) - signed'({qb[i][Q_W-1], qb[i]}))
               * signed'({1'b0, scale[i]});
      // stage 2: square
      p2[i] <= DIST_W'(p1[i] * p1[i]);
    end
  end

  // stage 3: adder tree over the lanes
  always_ff @(posedge clk) begin
    logic [DIST_W-1:0] s;
    s = '0;
    for (int i = 0; i < LANES; i++) s = s + p2[i];
    p3 <= s;
  end

  // stage 4: accumulate over channel groups
  always_ff @(posedge clk) begin
    if (v_pipe[2]) acc <= f_pipe[2] ? p3 : acc + p3;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_pipe <= '0; f_pipe <= '0; l_pipe <= '0; dist_valid <= 1'b0;
    end else begin
      v_pipe     <= {v_pipe[1:0], in_valid};
      f_pipe     <= {f_pipe[1:0], in_first};
      l_pipe     <= {l_pipe[1:0], in_last & in_valid};
      dist_valid <= v_pipe[2] & l_pipe[2];
    end
  end

  assign distance = acc;
endmodule
