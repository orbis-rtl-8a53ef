// topk_unit: top-k selection of the DATM engine (Step 5 of the algorithm).
//
// Words are appended one per cycle (in_valid/in_data); a clear pulse empties
// the list (a word offered in the same cycle becomes its first entry).
// A go pulse with keep starts the selection: the words are sorted ascending
// in place and the first min(keep, count) of them are streamed out with a
// valid/ready handshake, out_last on the final one, then done pulses.
// Sorting is done in two phases over two ping-pong buffers of MAX words:
//   1. block sort: every cycle one block of N words is read and pushed
//      through the pipelined bitonic network, and every cycle one sorted
//      block is written back (missing tail words are padded with all ones);
//   2. merge passes: runs of N, 2N, 4N ... words are merged pairwise with a
//      single comparator, one word per cycle, until one run remains.
// The paper states only that top-k uses a bitonic network built from
// comparator arrays; the block-then-merge scheme, needed because the list
// is far longer than any practical network, is this design's choice.
module topk_unit #(
  parameter int W   = 84,
  parameter int MAX = 1024,
  parameter int N   = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     in_valid,
  input  logic [W-1:0]             in_data,
  input  logic                     go,
  input  logic [$clog2(MAX+1)-1:0] keep,
  output logic                     busy,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [W-1:0]             out_data,
  output logic                     out_last,
  output logic                     done,
  output logic [$clog2(MAX+1)-1:0] count
);
  localparam int CW  = $clog2(MAX + 1);
  localparam int AW  = $clog2(MAX);

  typedef enum logic [2:0] {S_IDLE, S_BLOCK, S_MERGE, S_OUT} state_t;
  state_t state;

  logic [W-1:0] buf0 [MAX];
  logic [W-1:0] buf1 [MAX];
  logic         cur;          // buffer that holds the current runs
  logic [CW-1:0] m, kp;

  // block-sort phase
  logic [CW-1:0] blk_issue, blk_wr, nblk;
  logic [W-1:0]  srt_in  [N];
  logic [W-1:0]  srt_out [N];
  logic          srt_in_v, srt_out_v;

  // merge phase
  logic [CW:0] run_len, ps, pi, pj, po, ei, ej;
  logic [W-1:0] wa, wb;
  logic         take_a;

  // output phase
  logic [CW-1:0] optr;

  assign nblk = CW'((m + CW'(N - 1)) / CW'(N));
  assign srt_in_v = (state == S_BLOCK) && (blk_issue < nblk);
  always_comb begin
    for (int i = 0; i < N; i++) begin
      int a;
      a = int'(blk_issue) * N + i;
      if (a < int'(m) && a < MAX) srt_in[i] = buf0[a];
      else                        srt_in[i] = '1;
    end
  end

  bitonic_sorter #(.N(N), .W(W)) u_sort (
    .clk, .rst_n, .in_valid(srt_in_v), .in_data(srt_in),
    .out_valid(srt_out_v), .out_data(srt_out)
  );

  always_comb begin
    wa = cur ? buf1[pi[AW-1:0]] : buf0[pi[AW-1:0]];
    wb = cur ? buf1[pj[AW-1:0]] : buf0[pj[AW-1:0]];
    take_a = (pi < ei) && ((pj >= ej) || (wa <= wb));
  end

  always_ff @(posedge clk) begin
    if (state == S_IDLE && in_valid && (clear || int'(m) < MAX))
      buf0[clear ? '0 : m[AW-1:0]] <= in_data;
    if (srt_out_v) begin
      for (int i = 0; i < N; i++)
        if (int'(blk_wr) * N + i < MAX) buf1[int'(blk_wr) * N + i] <= srt_out[i];
    end
    if (state == S_MERGE && po < ej) begin
      if (cur) buf0[po[AW-1:0]] <= take_a ? wa : wb;
      else     buf1[po[AW-1:0]] <= take_a ? wa : wb;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; m <= '0; kp <= '0; cur <= 1'b0; done <= 1'b0;
      blk_issue <= '0; blk_wr <= '0; run_len <= '0;
      ps <= '0; pi <= '0; pj <= '0; po <= '0; ei <= '0; ej <= '0; optr <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (clear) m <= CW'(in_valid);
          else if (in_valid && int'(m) < MAX) m <= m + 1'b1;
          if (go) begin
            kp        <= (keep < m) ? keep : m;
            blk_issue <= '0;
            blk_wr    <= '0;
            cur       <= 1'b1;
            state     <= S_BLOCK;
          end
        end
        S_BLOCK: begin
          if (blk_issue < nblk) blk_issue <= blk_issue + 1'b1;
          if (srt_out_v) blk_wr <= blk_wr + 1'b1;
          if (blk_wr == nblk) begin
            run_len <= (CW+1)'(N);
            ps <= '0;
            pi <= '0;
            po <= '0;
            pj <= ((CW+1)'(N) < (CW+1)'(m)) ? (CW+1)'(N) : (CW+1)'(m);
            ei <= ((CW+1)'(N) < (CW+1)'(m)) ? (CW+1)'(N) : (CW+1)'(m);
            ej <= ((CW+1)'(2*N) < (CW+1)'(m)) ? (CW+1)'(2*N) : (CW+1)'(m);
            optr  <= '0;
            state <= ((CW+1)'(N) >= (CW+1)'(m)) ? S_OUT : S_MERGE;
          end
        end
        S_MERGE: begin
          if (po < ej) begin
            po <= po + 1'b1;
            if (take_a) pi <= pi + 1'b1;
            else        pj <= pj + 1'b1;
          end else begin
            // this pair of runs is merged: next pair, or next pass
            logic [CW+1:0] ns, nl;
            ns = (CW+2)'(ps) + (CW+2)'(2 * run_len);
            nl = (CW+2)'(run_len);
            if (ns >= (CW+2)'(m)) begin
              cur <= ~cur;
              nl  = (CW+2)'(2 * run_len);
              ns  = '0;
            end
            run_len <= (CW+1)'(nl);
            ps <= (CW+1)'(ns);
            pi <= (CW+1)'(ns);
            po <= (CW+1)'(ns);
            pj <= (CW+1)'(((ns + nl) < (CW+2)'(m)) ? (ns + nl) : (CW+2)'(m));
            ei <= (CW+1)'(((ns + nl) < (CW+2)'(m)) ? (ns + nl) : (CW+2)'(m));
            ej <= (CW+1)'(((ns + 2 * nl) < (CW+2)'(m)) ? (ns + 2 * nl) : (CW+2)'(m));
            if (nl >= (CW+2)'(m)) state <= S_OUT;
          end
        end
        S_OUT: begin
          if (optr >= kp) begin
            done  <= 1'b1;
            m     <= '0;
            state <= S_IDLE;
          end else if (out_ready) begin
            optr <= optr + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy      = (state != S_IDLE);
  assign out_valid = (state == S_OUT) && (optr < kp);
  assign out_data  = cur ? buf1[optr[AW-1:0]] : buf0[optr[AW-1:0]];
  assign out_last  = out_valid && (optr == kp - 1'b1);
  assign count     = m;
endmodule
