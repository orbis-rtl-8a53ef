// datm_engine: distribution-aware token matching (DATM) engine.
//
// Given N tokens of D channels, quantized to 4-bit codes with per-channel
// scale factors, it finds K destination (dst) tokens that represent the
// token distribution and pairs every other (src) token with its nearest dst,
// then keeps the fraction r of pairs with the smallest distance:
//   1. init     : K distinct dst tokens drawn by an LFSR (seeded by cfg_seed)
//   2. pairing  : distance of each src to every dst, nearest dst kept
//   3. converge : loss = mean nearest distance; stop when the previous loss
//                 minus this loss is below cfg_eps or after cfg_max_iter
//                 pairings
//   4. update   : per dst, mean of the codes of its src tokens, then the
//                 token nearest to that mean becomes the new dst
//   5. top-k    : the r * (#src) pairs with the smallest distance are
//                 streamed out, smallest first
// Distances are sum_c (s_c*(a_c-b_c))^2 over the 4-bit codes a, b.
//
// Datapath. NB distance accumulation units (dau) work side by side, each on
// LANES channels per cycle; a min tree picks the nearest of their NB results.
// During pairing the src token is broadcast to all units and each unit gets
// one dst token (dst copies sit in NB banks, slot k in bank k % NB); during
// the update the cluster mean is broadcast and each unit gets one of NB
// consecutive tokens (tokens sit in NB banks, token n in bank n % NB). One
// pairing pass takes about (#src) * ceil(K/NB) * D/LANES cycles.
// The update sums the codes of each cluster with adders (ADD), divides by
// the member count through a reciprocal unit and multiplier (Recip., MUL),
// rounds and clamps to the 4-bit range (Comp.), all channel group by group.
//
// Interface. While idle, codes are written with ld_q_* (one LANES-channel
// group of one token per cycle) and scale factors with ld_s_*. start runs
// the algorithm with the cfg_* values (cfg_k < cfg_n <= N_MAX, cfg_k <=
// K_MAX); the pairs then leave on pair_* with a valid/ready handshake and
// done pulses after the last one. iterations and loss report the number of
// pairing passes and the final loss.
//
// Follows the paper: the algorithm steps, the 4-bit codes, the DAU stage
// order (subtract, scale, square, add, accumulate), the min tree, vector
// units for update and convergence, bitonic top-k. This design's own
// choices: all sizes (NB = 8 follows the eight-input min tree as drawn,
// LANES = 4 the four scale inputs s1..s4 drawn in the DAU), the LFSR, the
// rule that a dst with no src keeps its token, the search for the token
// nearest to a mean over all N tokens with the same DAU datapath, the
// integer rounding, and the iteration cap.
module datm_engine
  import orbis_pkg::*;
#(
  parameter int D      = 3072,
  parameter int LANES  = 4,
  parameter int NB     = 8,
  parameter int N_MAX  = 1024,
  parameter int K_MAX  = 512,
  parameter int SORT_N = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // code and scale loading (idle only)
  input  logic                        ld_q_valid,
  input  logic [$clog2(N_MAX)-1:0]    ld_q_token,
  input  logic [$clog2(D/LANES)-1:0]  ld_q_ch,
  input  logic [LANES*Q_W-1:0]        ld_q_data,
  input  logic                        ld_s_valid,
  input  logic [$clog2(D/LANES)-1:0]  ld_s_ch,
  input  logic [LANES*SCALE_W-1:0]    ld_s_data,
  // run
  input  logic                        start,
  input  logic [$clog2(N_MAX):0]      cfg_n,
  input  logic [$clog2(K_MAX):0]      cfg_k,
  input  logic [RATIO_W:0]            cfg_ratio,
  input  logic [DIST_W-1:0]           cfg_eps,
  input  logic [7:0]                  cfg_max_iter,
  input  logic [15:0]                 cfg_seed,
  // result pairs, smallest distance first
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
  localparam int CH    = D / LANES;
  localparam int CHW   = $clog2(CH);
  localparam int IW    = $clog2(N_MAX);
  localparam int KW    = $clog2(K_MAX);
  localparam int LGNB  = $clog2(NB);
  localparam int QROWS = N_MAX / NB;
  localparam int KROWS = K_MAX / NB;
  localparam int QDEP  = QROWS * CH;
  localparam int DDEP  = KROWS * CH;
  localparam int SDEP  = K_MAX * CH;
  localparam int SUM_W = IW + Q_W + 1;
  localparam int CNT_W = IW + 1;
  localparam int EW    = DIST_W + 2 * IW;
  localparam int QWD   = LANES * Q_W;
  localparam int PIPE  = 1 + 4 + LGNB;  // memory read + DAU + min tree

  typedef enum logic [4:0] {
    S_IDLE, S_CLR, S_INIT, S_COPY, S_PAIR, S_PAIR_DRAIN, S_CONV_R, S_CONV_W,
    S_CONV, S_ACC, S_NR_START, S_NR_WAIT, S_NEAR, S_NEAR_DRAIN, S_REBUILD,
    S_TOPK_FEED, S_TOPK_OUT
  } state_t;

  typedef struct packed {
    logic          valid;
    logic          first_ch;
    logic          last_ch;
    logic          first_g;
    logic          last_g;
    logic [IW:0]   ref_id;
    logic [IW-1:0] g;
    logic [NB-1:0] mask;
    logic [LGNB-1:0] bank;
  } tag_t;

  state_t state;

  // ---------------------------------------------------------------- config
  logic [IW:0]         n_tok;
  logic [KW:0]         k_dst;
  logic [RATIO_W:0]    ratio;
  logic [DIST_W-1:0]   eps;
  logic [7:0]          max_iter;
  logic [15:0]         lfsr;
  logic [IW:0]         rmask;

  // ------------------------------------------------------- token bookkeeping
  logic [N_MAX-1:0]    is_dst;
  logic [IW-1:0]       dst_idx [K_MAX];
  logic [IW-1:0]       new_dst [K_MAX];
  logic [CNT_W-1:0]    cnt     [K_MAX];
  logic [K_MAX-1:0]    touched;
  logic [KW-1:0]       cidx    [N_MAX];  // nearest dst slot of each src
  logic [DIST_W-1:0]   cdist   [N_MAX];  // and its distance

  // ------------------------------------------------------------- counters
  logic [IW:0]         c_n;
  logic [KW:0]         c_k;
  logic [IW-1:0]       c_g;
  logic [CHW-1:0]      c_ch;
  logic [7:0]          iter;
  logic [DIST_W-1:0]   loss_sum, prev_loss, cur_loss;
  logic [IW:0]         src_cnt;

  // ------------------------------------------------------------- memories
  logic [QWD-1:0]          qmem   [NB][QDEP];
  logic [QWD-1:0]          dmem   [NB][DDEP];
  logic [LANES*SCALE_W-1:0] smem  [CH];
  logic [LANES*SUM_W-1:0]  summem [SDEP];
  logic [QWD-1:0]          q_rd   [NB];
  logic [QWD-1:0]          d_rd   [NB];
  logic [LANES*SCALE_W-1:0] s_rd;
  logic [LANES*SUM_W-1:0]  sum_rd;

  // ------------------------------------------------------------- issue side
  tag_t                iss;
  logic                iss_q_rd;       // qmem read this cycle
  logic [IW:0]         iss_tok;        // token whose word is read (copy/pair/acc)
  logic [$clog2(QDEP)-1:0] q_addr;
  logic [$clog2(DDEP)-1:0] d_addr;
  logic [$clog2(SDEP)-1:0] sum_addr;
  logic [IW-1:0]       ngroups;
  logic [IW:0]         glimit;
  logic                ch_last, g_last;

  // stage-1 registers for the copy and accumulate write-backs
  logic                s1_copy, s1_acc, s1_acc_last;
  logic [LGNB-1:0]     s1_bank;
  logic [KW:0]         s1_k;
  logic [$clog2(DDEP)-1:0] s1_d_waddr;
  logic [$clog2(SDEP)-1:0] s1_sum_addr;

  tag_t                tp [PIPE+1];

  // reciprocal unit shared by convergence check and dst update
  logic                rc_start, rc_busy, rc_done;
  logic [CNT_W-1:0]    rc_d;
  logic [RECIP_P:0]    rc_q;
  logic [RECIP_P:0]    mean_recip, loss_recip;

  // datapath
  logic signed [Q_W-1:0]     dau_a [LANES];
  logic signed [Q_W-1:0]     dau_b [NB][LANES];
  logic        [SCALE_W-1:0] dau_s [LANES];
  logic [NB-1:0]             dau_v;
  logic [DIST_W-1:0]         dau_d [NB];
  logic                      mt_valid, mt_any;
  logic [DIST_W-1:0]         mt_dist;
  logic [LGNB-1:0]           mt_idx;

  // result stage
  logic                best_any;
  logic [DIST_W-1:0]   best_dist;
  logic [IW-1:0]       best_idx;
  logic                mg_any;
  logic [DIST_W-1:0]   mg_dist;
  logic [IW-1:0]       mg_idx;

  // top-k
  logic                tk_clear, tk_in_v, tk_go, tk_busy, tk_done, tk_out_v, tk_last;
  logic [EW-1:0]       tk_in, tk_out;
  logic [IW:0]         tk_keep;
  logic [IW:0]         tk_count;

  logic pipe_busy;
  always_comb begin
    pipe_busy = 1'b0;
    for (int i = 1; i <= PIPE; i++) pipe_busy |= tp[i].valid;
  end

  // ------------------------------------------------------- issue decode
  always_comb begin
    ngroups  = (state == S_PAIR) ? IW'((k_dst + (KW+1)'(NB - 1)) >> LGNB)
                                 : IW'((n_tok + (IW+1)'(NB - 1)) >> LGNB);
    glimit   = (state == S_PAIR) ? (IW+1)'(k_dst) : n_tok;
    ch_last  = (c_ch == CHW'(CH - 1));
    g_last   = (c_g == ngroups - 1'b1);
    iss      = '0;
    iss_q_rd = 1'b0;
    iss_tok  = c_n;
    unique case (state)
      S_COPY: begin
        iss_tok  = (IW+1)'(dst_idx[c_k[KW-1:0]]);
        iss_q_rd = (c_k < k_dst);
      end
      S_PAIR: iss_q_rd = (c_n < n_tok) && !is_dst[c_n[IW-1:0]];
      S_ACC:  iss_q_rd = (c_n < n_tok) && !is_dst[c_n[IW-1:0]];
      S_NEAR: iss_q_rd = 1'b1;
      default: ;
    endcase
    if (state == S_PAIR || state == S_NEAR) begin
      iss.valid    = iss_q_rd;
      iss.first_ch = (c_ch == '0);
      iss.last_ch  = ch_last;
      iss.first_g  = (c_g == '0);
      iss.last_g   = g_last;
      iss.ref_id   = (state == S_PAIR) ? c_n : (IW+1)'(c_k);
      iss.g        = c_g;
      iss.bank     = iss_tok[LGNB-1:0];
      for (int i = 0; i < NB; i++)
        iss.mask[i] = ((IW+1)'(c_g) * (IW+1)'(NB) + (IW+1)'(i)) < glimit;
    end
    q_addr   = (state == S_NEAR)
             ? ($clog2(QDEP))'(int'(c_g) * CH + int'(c_ch))
             : ($clog2(QDEP))'(int'(iss_tok >> LGNB) * CH + int'(c_ch));
    d_addr   = ($clog2(DDEP))'(int'(c_g) * CH + int'(c_ch));
    sum_addr = (state == S_NEAR)
             ? ($clog2(SDEP))'(int'(c_k) * CH + int'(c_ch))
             : ($clog2(SDEP))'(int'(cidx[c_n[IW-1:0]]) * CH + int'(c_ch));
  end

  // ------------------------------------------------------------ memories
  for (genvar b = 0; b < NB; b++) begin : g_bank
    always_ff @(posedge clk) begin
      if (state == S_IDLE && ld_q_valid && ld_q_token[LGNB-1:0] == LGNB'(b))
        qmem[b][int'(ld_q_token >> LGNB) * CH + int'(ld_q_ch)] <= ld_q_data;
      q_rd[b] <= qmem[b][q_addr];
    end
    always_ff @(posedge clk) begin
      if (s1_copy && s1_k[LGNB-1:0] == LGNB'(b))
        dmem[b][s1_d_waddr] <= q_rd[s1_bank];
      d_rd[b] <= dmem[b][d_addr];
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_IDLE && ld_s_valid) smem[ld_s_ch] <= ld_s_data;
    s_rd <= smem[c_ch];
  end

  // cluster sums: read-modify-write during accumulation
  logic [LANES*SUM_W-1:0] sum_wr;
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [SUM_W-1:0] old;
      old = touched[s1_k[KW-1:0]] ? signed'(sum_rd[l*SUM_W +: SUM_W]) : '0;
      sum_wr[l*SUM_W +: SUM_W] = old + SUM_W'(signed'(q_rd[s1_bank][l*Q_W +: Q_W]));
    end
  end
  always_ff @(posedge clk) begin
    if (s1_acc) summem[s1_sum_addr] <= sum_wr;
    sum_rd <= summem[sum_addr];
  end

  // ------------------------------------------------------------- datapath
  // cluster mean of one lane: round(sum / count) via the reciprocal, clamped
  function automatic logic signed [Q_W-1:0] mean_code(input logic signed [SUM_W-1:0] s,
                                                      input logic [RECIP_P:0] r);
    logic [SUM_W-1:0]           mag;
    logic [SUM_W+RECIP_P+1:0]   prod;
    logic [SUM_W+RECIP_P+1:0]   rq;
    mag  = s[SUM_W-1] ? SUM_W'(-s) : SUM_W'(s);
    prod = (SUM_W+RECIP_P+2)'(mag) * (SUM_W+RECIP_P+2)'(r);
    rq   = (prod + (SUM_W+RECIP_P+2)'(1) * (SUM_W+RECIP_P+2)'(2**(RECIP_P-1))) >> RECIP_P;
    if (rq > (SUM_W+RECIP_P+2)'(QMAX)) rq = (SUM_W+RECIP_P+2)'(QMAX);
    return s[SUM_W-1] ? -Q_W'(rq) : Q_W'(rq);
  endfunction

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      dau_s[l] = s_rd[l*SCALE_W +: SCALE_W];
      if (state == S_NEAR || state == S_NR_START || state == S_NR_WAIT ||
          state == S_NEAR_DRAIN)
        dau_a[l] = mean_code(sum_rd[l*SUM_W +: SUM_W], mean_recip);
      else
        dau_a[l] = q_rd[tp[1].bank][l*Q_W +: Q_W];
      for (int b = 0; b < NB; b++) begin
        if (state == S_PAIR || state == S_PAIR_DRAIN)
          dau_b[b][l] = d_rd[b][l*Q_W +: Q_W];
        else
          dau_b[b][l] = q_rd[b][l*Q_W +: Q_W];
      end
    end
  end

  for (genvar b = 0; b < NB; b++) begin : g_dau
    dau #(.LANES(LANES)) u_dau (
      .clk, .rst_n,
      .in_valid(tp[1].valid), .in_first(tp[1].first_ch), .in_last(tp[1].last_ch),
      .qa(dau_a), .qb(dau_b[b]), .scale(dau_s),
      .dist_valid(dau_v[b]), .distance(dau_d[b])
    );
  end

  min_tree #(.N_IN(NB), .W(DIST_W)) u_min (
    .clk, .rst_n,
    .in_valid(dau_v[0]), .in_mask(tp[5].mask), .in_dist(dau_d),
    .out_valid(mt_valid), .out_any(mt_any), .out_dist(mt_dist), .out_idx(mt_idx)
  );

  // running nearest candidate of the current reference
  always_comb begin
    logic [IW-1:0] cand;
    cand = IW'(int'(tp[PIPE].g) * NB + int'(mt_idx));
    if (tp[PIPE].first_g || !best_any ||
        (mt_any && mt_dist < best_dist)) begin
      mg_any  = mt_any || (!tp[PIPE].first_g && best_any);
      mg_dist = (mt_any || tp[PIPE].first_g) ? mt_dist : best_dist;
      mg_idx  = (mt_any || tp[PIPE].first_g) ? cand : best_idx;
    end else begin
      mg_any  = best_any;
      mg_dist = best_dist;
      mg_idx  = best_idx;
    end
  end

  recip_unit #(.DW(CNT_W), .P(RECIP_P)) u_recip (
    .clk, .rst_n, .start(rc_start), .d(rc_d), .busy(rc_busy), .done(rc_done), .q(rc_q)
  );

  assign cur_loss = DIST_W'(({64'd0, loss_sum} * {{(128-RECIP_P-1){1'b0}}, loss_recip}) >> RECIP_P);

  topk_unit #(.W(EW), .MAX(N_MAX), .N(SORT_N)) u_topk (
    .clk, .rst_n, .clear(tk_clear), .in_valid(tk_in_v), .in_data(tk_in),
    .go(tk_go), .keep(tk_keep), .busy(tk_busy),
    .out_valid(tk_out_v), .out_ready(pair_ready), .out_data(tk_out),
    .out_last(tk_last), .done(tk_done), .count(tk_count)
  );

  assign tk_in   = {cdist[c_n[IW-1:0]], c_n[IW-1:0], dst_idx[cidx[c_n[IW-1:0]]]};
  assign tk_in_v = (state == S_TOPK_FEED) && (c_n < n_tok) && !is_dst[c_n[IW-1:0]];
  assign tk_keep = (IW+1)'(({{(RATIO_W+1){1'b0}}, src_cnt} * {{(IW+1){1'b0}}, ratio}) >> RATIO_W);

  assign pair_valid = tk_out_v;
  assign pair_dist  = tk_out[EW-1 -: DIST_W];
  assign pair_src   = tk_out[2*IW-1:IW];
  assign pair_dst   = tk_out[IW-1:0];
  assign pair_last  = tk_last;

  always_comb begin
    rc_start = 1'b0;
    rc_d     = '0;
    if (state == S_CONV_R) begin
      rc_start = 1'b1;
      rc_d     = CNT_W'(src_cnt);
    end else if (state == S_NR_START && c_k < k_dst && cnt[c_k[KW-1:0]] != '0) begin
      rc_start = 1'b1;
      rc_d     = cnt[c_k[KW-1:0]];
    end
  end

  // ------------------------------------------------------------ control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      for (int i = 0; i <= PIPE; i++) tp[i] <= '0;
      s1_copy <= 1'b0; s1_acc <= 1'b0; s1_acc_last <= 1'b0;
      done <= 1'b0; tk_clear <= 1'b0; tk_go <= 1'b0;
      iter <= '0; c_n <= '0; c_k <= '0; c_g <= '0; c_ch <= '0;
      loss_sum <= '0; prev_loss <= '0; loss <= '0; src_cnt <= '0;
      best_any <= 1'b0; best_dist <= '0; best_idx <= '0;
      lfsr <= 16'h1; is_dst <= '0; touched <= '0;
      n_tok <= '0; k_dst <= '0; ratio <= '0; eps <= '0; max_iter <= '0; rmask <= '0;
      mean_recip <= '0; loss_recip <= '0;
    end else begin
      done     <= 1'b0;
      tk_clear <= 1'b0;
      tk_go    <= 1'b0;

      // tag pipeline
      tp[1] <= iss;
      for (int i = 2; i <= PIPE; i++) tp[i] <= tp[i-1];

      // stage-1 write-back bookkeeping
      s1_copy     <= (state == S_COPY) && iss_q_rd;
      s1_acc      <= (state == S_ACC) && iss_q_rd;
      s1_acc_last <= (state == S_ACC) && iss_q_rd && ch_last;
      s1_bank     <= iss_tok[LGNB-1:0];
      s1_k        <= (state == S_COPY) ? c_k : (KW+1)'(cidx[c_n[IW-1:0]]);
      s1_d_waddr  <= ($clog2(DDEP))'(int'(c_k >> LGNB) * CH + int'(c_ch));
      s1_sum_addr <= sum_addr;
      if (s1_acc_last) touched[s1_k[KW-1:0]] <= 1'b1;

      // result stage
      if (tp[PIPE].valid && tp[PIPE].last_ch) begin
        best_any  <= mg_any;
        best_dist <= mg_dist;
        best_idx  <= mg_idx;
        if (tp[PIPE].last_g) begin
          if (state == S_PAIR || state == S_PAIR_DRAIN) begin
            cidx[tp[PIPE].ref_id[IW-1:0]]  <= KW'(mg_idx);
            cdist[tp[PIPE].ref_id[IW-1:0]] <= mg_dist;
            loss_sum <= loss_sum + mg_dist;
            src_cnt  <= src_cnt + 1'b1;
          end else begin
            new_dst[tp[PIPE].ref_id[KW-1:0]] <= mg_idx;
          end
        end
      end

      unique case (state)
        S_IDLE: begin
          if (start) begin
            n_tok    <= cfg_n;
            k_dst    <= cfg_k;
            ratio    <= cfg_ratio;
            eps      <= cfg_eps;
            max_iter <= (cfg_max_iter == '0) ? 8'd1 : cfg_max_iter;
            lfsr     <= (cfg_seed == '0) ? 16'h1 : cfg_seed;
            rmask    <= '0;
            state    <= S_CLR;
          end
        end
        S_CLR: begin
          is_dst <= '0;
          c_k    <= '0;
          iter   <= '0;
          // smallest all-ones mask covering n_tok - 1
          for (int i = 0; i <= IW; i++)
            if ((n_tok - 1'b1) >> i != '0) rmask[i] <= 1'b1;
          state  <= S_INIT;
        end
        S_INIT: begin
          // Galois LFSR x^16 + x^14 + x^13 + x^11 + 1
          lfsr <= {1'b0, lfsr[15:1]} ^ (lfsr[0] ? 16'hB400 : 16'h0);
          if (c_k >= (KW+1)'(k_dst)) begin
            c_k <= '0; c_ch <= '0;
            state <= S_COPY;
          end else if (((IW+1)'(lfsr) & rmask) < n_tok &&
                       !is_dst[IW'((IW+1)'(lfsr) & rmask)]) begin
            dst_idx[c_k[KW-1:0]]              <= IW'((IW+1)'(lfsr) & rmask);
            is_dst[IW'((IW+1)'(lfsr) & rmask)] <= 1'b1;
            c_k <= c_k + 1'b1;
          end
        end
        S_COPY: begin
          if (c_k < k_dst) begin
            c_ch <= ch_last ? '0 : c_ch + 1'b1;
            if (ch_last) c_k <= c_k + 1'b1;
          end else if (!s1_copy) begin
            c_n <= '0; c_g <= '0; c_ch <= '0;
            loss_sum <= '0; src_cnt <= '0;
            state <= S_PAIR;
          end
        end
        S_PAIR: begin
          if (c_n >= n_tok) begin
            state <= S_PAIR_DRAIN;
          end else if (is_dst[c_n[IW-1:0]]) begin
            c_n <= c_n + 1'b1;
          end else begin
            c_ch <= ch_last ? '0 : c_ch + 1'b1;
            if (ch_last) begin
              c_g <= g_last ? '0 : c_g + 1'b1;
              if (g_last) c_n <= c_n + 1'b1;
            end
          end
        end
        S_PAIR_DRAIN: if (!pipe_busy) state <= S_CONV_R;
        S_CONV_R: state <= S_CONV_W;
        S_CONV_W: if (rc_done) begin
          loss_recip <= rc_q;
          state      <= S_CONV;
        end
        S_CONV: begin
          logic signed [DIST_W:0] delta;
          delta = signed'({1'b0, prev_loss}) - signed'({1'b0, cur_loss});
          iter <= iter + 1'b1;
          loss <= cur_loss;
          if ((iter != '0 && delta < signed'({1'b0, eps})) ||
              (iter + 1'b1 >= max_iter)) begin
            c_n      <= '0;
            tk_clear <= 1'b1;
            state    <= S_TOPK_FEED;
          end else begin
            prev_loss <= cur_loss;
            touched   <= '0;
            for (int k = 0; k < K_MAX; k++) cnt[k] <= '0;
            c_n <= '0; c_ch <= '0;
            state <= S_ACC;
          end
        end
        S_ACC: begin
          if (c_n >= n_tok) begin
            if (!s1_acc) begin
              c_k <= '0;
              state <= S_NR_START;
            end
          end else if (is_dst[c_n[IW-1:0]]) begin
            c_n <= c_n + 1'b1;
          end else begin
            if (c_ch == '0) cnt[cidx[c_n[IW-1:0]]] <= cnt[cidx[c_n[IW-1:0]]] + 1'b1;
            c_ch <= ch_last ? '0 : c_ch + 1'b1;
            if (ch_last) c_n <= c_n + 1'b1;
          end
        end
        S_NR_START: begin
          if (c_k >= k_dst) begin
            state <= S_NEAR_DRAIN;
          end else if (cnt[c_k[KW-1:0]] == '0) begin
            new_dst[c_k[KW-1:0]] <= dst_idx[c_k[KW-1:0]];
            c_k <= c_k + 1'b1;
          end else begin
            state <= S_NR_WAIT;
          end
        end
        S_NR_WAIT: if (rc_done) begin
          mean_recip <= rc_q;
          c_g <= '0; c_ch <= '0;
          state <= S_NEAR;
        end
        S_NEAR: begin
          c_ch <= ch_last ? '0 : c_ch + 1'b1;
          if (ch_last) begin
            c_g <= g_last ? '0 : c_g + 1'b1;
            if (g_last) begin
              c_k   <= c_k + 1'b1;
              state <= S_NR_START;
            end
          end
        end
        S_NEAR_DRAIN: if (!pipe_busy) state <= S_REBUILD;
        S_REBUILD: begin
          logic [N_MAX-1:0] nd;
          nd = '0;
          for (int k = 0; k < K_MAX; k++) begin
            if (k < int'(k_dst)) begin
              nd[new_dst[k]] = 1'b1;
              dst_idx[k] <= new_dst[k];
            end
          end
          is_dst <= nd;
          c_k <= '0; c_ch <= '0;
          state <= S_COPY;
        end
        S_TOPK_FEED: begin
          if (c_n >= n_tok) begin
            tk_go <= 1'b1;
            state <= S_TOPK_OUT;
          end else begin
            c_n <= c_n + 1'b1;
          end
        end
        S_TOPK_OUT: begin
          if (tk_done) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy       = (state != S_IDLE);
  assign iterations = iter;

  // the engine relies on these size relations
  initial begin
    assert (NB == (1 << LGNB)) else $error("NB must be a power of two");
    assert (CH >= 2) else $error("D/LANES must be at least 2");
    assert (N_MAX % NB == 0 && K_MAX % NB == 0) else $error("N_MAX, K_MAX must be multiples of NB");
  end
endmodule
