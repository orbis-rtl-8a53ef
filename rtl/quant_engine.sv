// quant_engine: 4-bit channel-wise quantization engine (QE).
//
// It turns the signed ACT_W-bit output activations of an attention layer
// into signed 4-bit codes with one scale factor per channel, in three steps:
//   1. scale pass: activations arrive channel by channel, TREE_N tokens of
//      one channel per beat (a_*; a_first / a_last frame a channel). The max
//      tree reduces each beat to its largest magnitude and a running maximum
//      per channel is written to the scratchpad (amax).
//   2. reciprocal pass (r_start): for every channel the reciprocal unit
//      computes floor(2^RECIP_P / amax). The amax values leave as scale
//      factors (s_*, LANES channels per word) for the DATM engine; the
//      scale step of a code is amax / QMAX.
//   3. quantize pass: activations arrive token by token, LANES channels per
//      beat (x_*); the multipliers form
//        q = sign(x) * min(QMAX, round(|x| * QMAX * recip / 2^RECIP_P))
//      and the codes leave two cycles later on q_*.
// Follows the paper: channel-wise 4-bit quantization with a max tree, a
// reciprocal unit and multipliers. The paper also says the quantization
// itself uses the vector unit of the diffusion engine; here the drawn
// multiplier of the QE does it. The symmetric range -7..7, the fixed-point
// formats and the pass order are this design's choices.
module quant_engine
  import orbis_pkg::*;
#(
  parameter int D      = 3072,
  parameter int TREE_N = 8,
  parameter int LANES  = 4,
  parameter int N_MAX  = 1024
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // scale pass
  input  logic                           a_valid,
  input  logic [$clog2(D)-1:0]           a_ch,
  input  logic                           a_first,
  input  logic                           a_last,
  input  logic signed [ACT_W-1:0]        a_data [TREE_N],
  // reciprocal pass
  input  logic                           r_start,
  output logic                           r_busy,
  output logic                           r_done,
  output logic                           s_valid,
  output logic [$clog2(D/LANES)-1:0]     s_grp,
  output logic [LANES*SCALE_W-1:0]       s_data,
  // quantize pass
  input  logic                           x_valid,
  input  logic [$clog2(N_MAX)-1:0]       x_token,
  input  logic [$clog2(D/LANES)-1:0]     x_grp,
  input  logic signed [ACT_W-1:0]        x_data [LANES],
  output logic                           q_valid,
  output logic [$clog2(N_MAX)-1:0]       q_token,
  output logic [$clog2(D/LANES)-1:0]     q_grp,
  output logic [LANES*Q_W-1:0]           q_data
);
  localparam int CW  = $clog2(D);
  localparam int GW  = $clog2(D / LANES);
  localparam int TL  = $clog2(TREE_N);
  localparam int PW  = ACT_W + 3 + RECIP_W;  // |x| * QMAX * recip

  // scratchpad: per-channel amax and reciprocal
  logic [SCALE_W-1:0]    amax_mem  [D];
  logic [RECIP_W-1:0]    recip_mem [D / LANES][LANES];

  // ---------------------------------------------------------- scale pass
  logic                  mt_valid;
  logic [ACT_W-1:0]      mt_max;
  logic [TL:0]           sh_first, sh_last;
  logic [CW-1:0]         sh_ch [TL+1];
  logic [ACT_W-1:0]      run_max, new_max;

  max_tree #(.N_IN(TREE_N), .W(ACT_W)) u_max (
    .clk, .rst_n, .in_valid(a_valid), .in_data(a_data),
    .out_valid(mt_valid), .out_max(mt_max)
  );

  // channel tags travel beside the tree
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh_first <= '0; sh_last <= '0;
      for (int i = 0; i <= TL; i++) sh_ch[i] <= '0;
    end else begin
      sh_first <= {sh_first[TL-1:0], a_first};
      sh_last  <= {sh_last[TL-1:0], a_last};
      sh_ch[0] <= a_ch;
      for (int i = 1; i <= TL; i++) sh_ch[i] <= sh_ch[i-1];
    end
  end

  assign new_max = (sh_first[TL-1] || mt_max > run_max) ? mt_max : run_max;

  always_ff @(posedge clk) begin
    if (mt_valid) begin
      run_max <= new_max;
      if (sh_last[TL-1]) amax_mem[sh_ch[TL-1]] <= new_max;
    end
  end

  // ----------------------------------------------------- reciprocal pass
  typedef enum logic [1:0] {R_IDLE, R_ISSUE, R_WAIT} rstate_t;
  rstate_t              rst;
  logic [CW:0]          r_ch;
  logic                 rc_start, rc_busy, rc_done;
  logic [RECIP_P:0]     rc_q;
  logic [LANES*SCALE_W-1:0] s_acc;

  recip_unit #(.DW(SCALE_W), .P(RECIP_P)) u_recip (
    .clk, .rst_n, .start(rc_start), .d(amax_mem[r_ch[CW-1:0]]),
    .busy(rc_busy), .done(rc_done), .q(rc_q)
  );
  assign rc_start = (rst == R_ISSUE);

  always_ff @(posedge clk) begin
    if (rst == R_WAIT && rc_done)
      recip_mem[($clog2(D/LANES))'(r_ch[CW-1:0] / CW'(LANES))][($clog2(LANES))'(r_ch[CW-1:0] % CW'(LANES))] <= rc_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rst <= R_IDLE; r_ch <= '0; r_done <= 1'b0; s_valid <= 1'b0;
      s_grp <= '0; s_acc <= '0;
    end else begin
      r_done  <= 1'b0;
      s_valid <= 1'b0;
      unique case (rst)
        R_IDLE: if (r_start) begin
          r_ch <= '0;
          rst  <= R_ISSUE;
        end
        R_ISSUE: rst <= R_WAIT;
        R_WAIT: if (rc_done) begin
          logic [LANES*SCALE_W-1:0] acc;
          acc = s_acc;
          acc[(r_ch % (CW+1)'(LANES)) * SCALE_W +: SCALE_W] = amax_mem[r_ch[CW-1:0]];
          s_acc <= acc;
          if ((r_ch % (CW+1)'(LANES)) == (CW+1)'(LANES - 1)) begin
            s_valid <= 1'b1;
            s_grp   <= GW'(r_ch / (CW+1)'(LANES));
          end
          if (r_ch == (CW+1)'(D - 1)) begin
            r_done <= 1'b1;
            rst    <= R_IDLE;
          end else begin
            r_ch <= r_ch + 1'b1;
            rst  <= R_ISSUE;
          end
        end
        default: rst <= R_IDLE;
      endcase
    end
  end
  assign r_busy = (rst != R_IDLE);
  assign s_data = s_acc;

  // ------------------------------------------------------- quantize pass
  logic                  x1_valid;
  logic [$clog2(N_MAX)-1:0] x1_token;
  logic [GW-1:0]         x1_grp;
  logic signed [ACT_W-1:0] x1_data [LANES];
  logic [RECIP_W-1:0]    x1_recip [LANES];

  always_ff @(posedge clk) begin
    x1_token <= x_token;
    x1_grp   <= x_grp;
    x1_data  <= x_data;
    x1_recip <= recip_mem[x_grp];
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      logic [ACT_W-1:0] mag;
      logic [PW-1:0]    p;
      logic [PW-1:0]    r;
      mag = x1_data[l][ACT_W-1] ? ACT_W'(-x1_data[l]) : ACT_W'(x1_data[l]);
      p   = PW'(mag) * PW'(QMAX) * PW'(x1_recip[l]);
      r   = (p + PW'(2**(RECIP_P-1))) >> RECIP_P;
      if (r > PW'(QMAX)) r = PW'(QMAX);
      q_data[l*Q_W +: Q_W] <= x1_data[l][ACT_W-1] ? Q_W'(-r) : Q_W'(r);
    end
    q_token <= x1_token;
    q_grp   <= x1_grp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x1_valid <= 1'b0; q_valid <= 1'b0;
    end else begin
      x1_valid <= x_valid;
      q_valid  <= x1_valid;
    end
  end
endmodule
