// datm_ref_pkg: untimed reference model of the token-matching flow, used by
// the testbenches to compute expected results independently of the RTL.
// Codes are kept as ints in flat arrays: q[n*D + c] for token n, channel c.
package datm_ref_pkg;

  typedef struct {
    longint pdist;
    int     src;
    int     dst;
  } pair_t;

  localparam int P = 24;

  // floor(2^P / d), all ones of P+1 bits for d = 0
  function automatic longint recip(input longint d);
    if (d == 0) return (longint'(1) << (P + 1)) - 1;
    return (longint'(1) << P) / d;
  endfunction

  // 4-bit code of activation x with channel amax a
  function automatic int quant(input int x, input int a);
    longint r, m;
    r = recip(a);
    m = ((x < 0 ? -longint'(x) : longint'(x)) * 7 * r + (longint'(1) << (P - 1))) >>> P;
    if (m > 7) m = 7;
    return (x < 0) ? -int'(m) : int'(m);
  endfunction

  function automatic longint pair_dist(input int a[], input int ao, input int b[],
                                       input int bo, input int s[], input int d);
    longint acc, t;
    acc = 0;
    for (int c = 0; c < d; c++) begin
      t   = longint'(s[c]) * longint'(a[ao + c] - b[bo + c]);
      acc += t * t;
    end
    return acc;
  endfunction

  function automatic int lfsr_step(input int l);
    int n;
    n = (l >> 1) & 16'h7fff;
    if (l & 1) n = n ^ 16'hB400;
    return n;
  endfunction

  function automatic bit pair_less(input pair_t a, input pair_t b);
    if (a.pdist != b.pdist) return a.pdist < b.pdist;
    return a.src < b.src;
  endfunction

  // Whole DATM flow; returns the kept pairs sorted by (dist, src).
  // stats[0]: iterations, [1]: clusters left empty, [2]: 1 if stopped by eps
  function automatic void run(input int n, input int k, input int d, input int q[],
                              input int s[], input int ratio, input longint eps,
                              input int max_iter, input int seed,
                              ref pair_t pairs[$], output longint loss,
                              output int stats[3]);
    int     dst[], nd[], cidx[], cnt[], sum[], mean[];
    bit     is_dst[];
    longint cdist[];
    int     lfsr, rmask, kk, src_cnt, iter;
    longint prev, cur, best, dd;
    logic [127:0] prod;
    dst = new[k]; nd = new[k]; cidx = new[n]; cdist = new[n]; is_dst = new[n];
    cnt = new[k]; sum = new[k * d]; mean = new[d];
    stats[0] = 0; stats[1] = 0; stats[2] = 0;
    lfsr  = (seed == 0) ? 1 : seed;
    rmask = 0;
    for (int i = 0; i < 31; i++) if (((n - 1) >> i) != 0) rmask |= (1 << i);
    kk = 0;
    while (kk < k) begin
      int c;
      c = lfsr & rmask;
      if (c < n && !is_dst[c]) begin
        dst[kk] = c; is_dst[c] = 1; kk++;
      end
      lfsr = lfsr_step(lfsr);
    end
    iter = 0;
    prev = 0;
    forever begin
      // pairing
      longint lsum;
      lsum = 0; src_cnt = 0;
      for (int t = 0; t < n; t++) begin
        if (is_dst[t]) continue;
        best = -1;
        for (int j = 0; j < k; j++) begin
          dd = pair_dist(q, dst[j] * d, q, t * d, s, d);
          if (best < 0 || dd < best) begin best = dd; cidx[t] = j; end
        end
        cdist[t] = best;
        lsum += best;
        src_cnt++;
      end
      prod = 128'(lsum) * 128'(recip(src_cnt));
      cur  = longint'(prod >> P);
      loss = cur;
      if ((iter != 0 && (prev - cur) < eps) || iter + 1 >= max_iter) begin
        if (iter != 0 && (prev - cur) < eps) stats[2] = 1;
        iter++;
        break;
      end
      iter++;
      prev = cur;
      // dst update
      foreach (cnt[j]) cnt[j] = 0;
      foreach (sum[j]) sum[j] = 0;
      for (int t = 0; t < n; t++) begin
        if (is_dst[t]) continue;
        cnt[cidx[t]]++;
        for (int c = 0; c < d; c++) sum[cidx[t] * d + c] += q[t * d + c];
      end
      for (int j = 0; j < k; j++) begin
        if (cnt[j] == 0) begin
          nd[j] = dst[j];
          stats[1]++;
          continue;
        end
        for (int c = 0; c < d; c++) begin
          longint r, m;
          int sv;
          sv = sum[j * d + c];
          r  = recip(cnt[j]);
          m  = ((sv < 0 ? -longint'(sv) : longint'(sv)) * r + (longint'(1) << (P - 1))) >>> P;
          if (m > 7) m = 7;
          mean[c] = (sv < 0) ? -int'(m) : int'(m);
        end
        best = -1;
        for (int t = 0; t < n; t++) begin
          dd = pair_dist(mean, 0, q, t * d, s, d);
          if (best < 0 || dd < best) begin best = dd; nd[j] = t; end
        end
      end
      foreach (is_dst[t]) is_dst[t] = 0;
      for (int j = 0; j < k; j++) begin dst[j] = nd[j]; is_dst[nd[j]] = 1; end
    end
    stats[0] = iter;
    // top-k
    pairs.delete();
    for (int t = 0; t < n; t++) begin
      pair_t p;
      if (is_dst[t]) continue;
      p.pdist = cdist[t]; p.src = t; p.dst = dst[cidx[t]];
      begin
        int pos;
        pos = pairs.size();
        for (int i = 0; i < pairs.size(); i++)
          if (pair_less(p, pairs[i])) begin pos = i; break; end
        pairs.insert(pos, p);
      end
    end
    kk = int'((longint'(src_cnt) * longint'(ratio)) >>> 16);
    while (pairs.size() > kk) void'(pairs.pop_back());
  endfunction
endpackage
