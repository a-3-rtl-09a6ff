// a3_ref_pkg: bit-exact reference model of the attention accelerator, used by
// the testbenches. It is written directly from the algorithm, not from the RTL:
// plain integer arithmetic over flat arrays (element [r][j] at index r*d + j).
// All fixed-point values are integers scaled by 2^f (inputs), 2^2f (products,
// dot products, scores, weights) or 2^3f (outputs), with f = 4.
package a3_ref_pkg;

  // exp(-x/256) on the 16-bit two-table scheme; x >= 0 in units of 2^-8
  function automatic int exp_score(input longint x);
    int u, l, hi, lo;
    if (x >= 65536) return 0;
    u  = int'(x) >> 8;
    l  = int'(x) & 255;
    hi = int'($exp(-real'(u)) * 256.0);
    lo = int'($exp(-real'(l) / 256.0) * 256.0);
    return (hi * lo + 128) >> 8;
  endfunction

  // floor(score * 256 / expsum), saturated to 9 bits
  function automatic int weight_of(input int score, input int expsum);
    int w;
    if (expsum == 0) return 511;
    w = (score * 256) / expsum;
    return (w > 511) ? 511 : w;
  endfunction

  // Sort each column ascending (stable), giving value and original row ID.
  function automatic void sort_columns(input int key[], input int n, input int d,
                                       output int sval[], output int srid[]);
    sval = new[n * d];
    srid = new[n * d];
    for (int j = 0; j < d; j++) begin
      for (int r = 0; r < n; r++) begin
        int k;
        k = r;
        // insertion: shift larger entries up
        while (k > 0 && sval[(k-1)*d + j] > key[r*d + j]) begin
          sval[k*d + j] = sval[(k-1)*d + j];
          srid[k*d + j] = srid[(k-1)*d + j];
          k--;
        end
        sval[k*d + j] = key[r*d + j];
        srid[k*d + j] = r;
      end
    end
  endfunction

  // Greedy candidate search, M iterations, with the min-side skip heuristic.
  // The running sum that decides the skip at iteration t contains the values
  // added up to iteration t-2 (greedy scores are updated one cycle after the
  // pop, the running sum is read from a register).
  function automatic void greedy(input int sval[], input int srid[], input int q[],
                                 input int n, input int d, input int m,
                                 output int cands[$], output int skips);
    int vmax[], vmin[];
    longint gs[], add_hist[];
    longint cum;
    vmax = new[d]; vmin = new[d]; gs = new[n]; add_hist = new[m > 0 ? m : 1];
    foreach (vmax[j]) begin vmax[j] = 0; vmin[j] = 0; end
    foreach (gs[r]) gs[r] = 0;
    skips = 0;
    cands.delete();
    for (int it = 0; it < m; it++) begin
      int bj, bp, br;
      longint add;
      add = 0;
      cum = 0;
      for (int k = 0; k <= it - 2; k++) cum += add_hist[k];
      // max side
      bj = -1; bp = 0; br = 0;
      for (int j = 0; j < d; j++) begin
        if (vmax[j] < n) begin
          int pos, p;
          pos = (q[j] > 0) ? n - 1 - vmax[j] : vmax[j];
          p   = sval[pos*d + j] * q[j];
          if (bj < 0 || p > bp) begin bj = j; bp = p; br = srid[pos*d + j]; end
        end
      end
      if (bj >= 0) begin
        vmax[bj]++;
        if (bp > 0) begin gs[br] += bp; add += bp; end
      end
      // min side
      if (cum < 0) skips++;
      else begin
        bj = -1; bp = 0; br = 0;
        for (int j = 0; j < d; j++) begin
          if (vmin[j] < n) begin
            int pos, p;
            pos = (q[j] > 0) ? vmin[j] : n - 1 - vmin[j];
            p   = sval[pos*d + j] * q[j];
            if (bj < 0 || p < bp) begin bj = j; bp = p; br = srid[pos*d + j]; end
          end
        end
        if (bj >= 0) begin
          vmin[bj]++;
          if (bp < 0) begin gs[br] += bp; add += bp; end
        end
      end
      add_hist[it] = add;
    end
    for (int r = 0; r < n; r++) if (gs[r] > 0) cands.push_back(r);
  endfunction

  // Whole attention for one query. rows: rows to score, in order.
  function automatic void attention(input int key[], input int val[], input int q[],
                                    input int n, input int d, input int rows[$],
                                    input bit approx, input longint t,
                                    output longint outv[], output int kcount,
                                    output longint maxdp);
    longint dp[$];
    int     keep[$], score[$];
    longint expsum;
    outv = new[d];
    foreach (outv[j]) outv[j] = 0;
    maxdp = 0;
    foreach (rows[i]) begin
      longint s;
      s = 0;
      for (int j = 0; j < d; j++) s += longint'(key[rows[i]*d + j]) * q[j];
      dp.push_back(s);
      if (i == 0 || s > maxdp) maxdp = s;
    end
    expsum = 0;
    foreach (rows[i]) begin
      if (!approx || (maxdp - dp[i] <= t)) begin
        int sc;
        sc = exp_score(maxdp - dp[i]);
        keep.push_back(rows[i]);
        score.push_back(sc);
        expsum += sc;
      end
    end
    kcount = keep.size();
    foreach (keep[i]) begin
      int w;
      w = weight_of(score[i], int'(expsum));
      for (int j = 0; j < d; j++) outv[j] += longint'(w) * val[keep[i]*d + j];
    end
  endfunction

endpackage
