// orbis_top: token-matching side of the accelerator: quantization engine
// followed by the DATM engine.
//
// During a full-computation timestep the attention output of a layer is fed
// twice: first channel-major (a_*) so the QE can find each channel's
// largest magnitude, then, after r_start has turned those into scale
// factors (passed straight into the DATM engine's scale scratchpad),
// token-major (x_*) so the QE can quantize it; the 4-bit codes are written
// straight into the DATM engine's token scratchpad. start then runs the
// matching, and the chosen dst/src token index pairs leave on pair_* for
// external memory, where reduced-computation timesteps read them.
// The diffusion engine (systolic array and vector unit), the global and
// external memories are outside this module: their side of the a_*, x_*
// and pair_* ports is where they would connect. Sizes are those of the two
// engines.
module orbis_top
  import orbis_pkg::*;
#(
  parameter int D      = 3072,
  parameter int LANES  = 4,
  parameter int NB     = 8,
  parameter int TREE_N = 8,
  parameter int N_MAX  = 1024,
  parameter int K_MAX  = 512,
  parameter int SORT_N = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // activations, channel-major (scale pass)
  input  logic                        a_valid,
  input  logic [$clog2(D)-1:0]        a_ch,
  input  logic                        a_first,
  input  logic                        a_last,
  input  logic signed [ACT_W-1:0]     a_data [TREE_N],
  input  logic                        r_start,
  output logic                        r_busy,
  output logic                        r_done,
  // activations, token-major (quantize pass)
  input  logic                        x_valid,
  input  logic [$clog2(N_MAX)-1:0]    x_token,
  input  logic [$clog2(D/LANES)-1:0]  x_grp,
  input  logic signed [ACT_W-1:0]     x_data [LANES],
  // matching
  input  logic                        start,
  input  logic [$clog2(N_MAX):0]      cfg_n,
  input  logic [$clog2(K_MAX):0]      cfg_k,
  input  logic [RATIO_W:0]            cfg_ratio,
  input  logic [DIST_W-1:0]           cfg_eps,
  input  logic [7:0]                  cfg_max_iter,
  input  logic [15:0]                 cfg_seed,
  output logic                        pair_valid,
  input  logic                        pair_ready,
  output logic [$clog2(N_MAX)-1:0]    pair_dst,
  output logic [$clog2(N_MAX)-1:0]    pair_src,
  output logic [DIST_W-1:0]           pair_dist,
  output logic                        pair_last,
  output logic                        busy,
  output logic                        done,
  output logic [7:0]                  iterations,
  output logic [DIST_W-1:0]           loss
);
  logic                        s_valid;
  logic [$clog2(D/LANES)-1:0]  s_grp;
  logic [LANES*SCALE_W-1:0]    s_data;
  logic                        q_valid;
  logic [$clog2(N_MAX)-1:0]    q_token;
  logic [$clog2(D/LANES)-1:0]  q_grp;
  logic [LANES*Q_W-1:0]        q_data;

  quant_engine #(.D(D), .TREE_N(TREE_N), .LANES(LANES), .N_MAX(N_MAX)) u_qe (
    .clk, .rst_n,
    .a_valid, .a_ch, .a_first, .a_last, .a_data,
    .r_start, .r_busy, .r_done, .s_valid, .s_grp, .s_data,
    .x_valid, .x_token, .x_grp, .x_data,
    .q_valid, .q_token, .q_grp, .q_data
  );

  datm_engine #(.D(D), .LANES(LANES), .NB(NB), .N_MAX(N_MAX), .K_MAX(K_MAX),
                .SORT_N(SORT_N)) u_datm (
    .clk, .rst_n,
    .ld_q_valid(q_valid), .ld_q_token(q_token), .ld_q_ch(q_grp), .ld_q_data(q_data),
    .ld_s_valid(s_valid), .ld_s_ch(s_grp), .ld_s_data(s_data),
    .start, .cfg_n, .cfg_k, .cfg_ratio, .cfg_eps, .cfg_max_iter, .cfg_seed,
    .pair_valid, .pair_ready, .pair_dst, .pair_src, .pair_dist, .pair_last,
    .busy, .done, .iterations, .loss
  );
endmodule
