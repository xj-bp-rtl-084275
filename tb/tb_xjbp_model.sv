// tb_xjbp_model: reference model of XJ-BP decoding for the testbenches.
//
// Written directly from the decoding rules, node by node, with plain integers
// and none of the hardware's sharing tricks: constituent codes are found by
// counting information leaves, the REP and SPC rules loop over "all other
// nodes" explicitly, and every message is clamped to +-LLR_MAX exactly where
// the hardware keeps an LLR_W-bit word. It also builds frozen sets (the
// Bhattacharyya bound on a binary erasure channel), encodes messages and
// quantises noisy channel outputs.
package tb_xjbp_model;
  import xjbp_pkg::*;

  typedef int          iarr_t[];
  typedef bit          barr_t[];

  function automatic int clampi(int v);
    return (v > LLR_MAX) ? LLR_MAX : (v < -LLR_MAX) ? -LLR_MAX : v;
  endfunction

  function automatic int gi(int x, int y);
    int m, ax, ay;
    ax = (x < 0) ? -x : x;
    ay = (y < 0) ? -y : y;
    m  = (ax < ay) ? ax : ay;
    return ((x < 0) != (y < 0)) ? -m : m;
  endfunction

  function automatic int log2i(int n);
    int m = 0;
    while ((1 << m) < n) m++;
    return m;
  endfunction

  // Frozen set of an (n,k) code: the n-k largest Bhattacharyya parameters of
  // the bit channels on a BEC with erasure probability eps. The index MSB
  // picks the combination next to the channel (stage m of the factor graph),
  // so the recursion runs from the MSB down: bit 0 -> 2z - z^2, bit 1 -> z^2.
  function automatic barr_t frozen_bec(int n, int k, real eps);
    real   z[];
    barr_t fr;
    int    m, idx[];
    m = log2i(n);
    z = new[n]; fr = new[n]; idx = new[n];
    for (int i = 0; i < n; i++) begin
      real v;
      v = eps;
      for (int t = m - 1; t >= 0; t--) v = (((i >> t) & 1) != 0) ? v * v : 2.0 * v - v * v;
      z[i] = v; idx[i] = i; fr[i] = 1'b0;
    end
    // selection of the n-k worst channels (ties: lower index first)
    for (int f = 0; f < n - k; f++) begin
      int best;
      best = -1;
      for (int i = 0; i < n; i++)
        if (!fr[i] && (best < 0 || z[i] > z[best])) best = i;
      fr[best] = 1'b1;
    end
    return fr;
  endfunction

  // x = u G with G = F^(x)m, F = [1 0; 1 1].
  function automatic barr_t polar_encode(barr_t u);
    barr_t x;
    int    n;
    n = u.size();
    x = new[n];
    foreach (u[i]) x[i] = u[i];
    for (int h = 1; h < n; h = h * 2)
      for (int i = 0; i < n; i++)
        if ((i & h) == 0) x[i] = x[i] ^ x[i + h];
    return x;
  endfunction

  // Role of block b of column c: 0 none, 1 N0, 2 N1, 3 REP, 4 SPC (before
  // the "maximal" rule is applied).
  function automatic int block_kind(barr_t fr, int c, int b, int min_log);
    int sz, ninfo, lo;
    sz = 1 << c; lo = b * sz; ninfo = 0;
    for (int i = lo; i < lo + sz; i++) if (!fr[i]) ninfo++;
    if (ninfo == 0)  return 1;
    if (ninfo == sz) return 2;
    if (c >= min_log && ninfo == 1 && !fr[lo + sz - 1]) return 3;
    if (c >= min_log && ninfo == sz - 1 && fr[lo]) return 4;
    return 0;
  endfunction

  // Role of node i in column c after the maximal rule (0 when not a root).
  function automatic int node_role(barr_t fr, int c, int i, int min_log);
    int m, k;
    m = log2i(fr.size());
    k = block_kind(fr, c, i >> c, min_log);
    if (k == 0) return 0;
    for (int a = c + 1; a <= m; a++)
      if (block_kind(fr, a, i >> a, min_log) != 0) return 0;
    return k;
  endfunction

  // PE p of stage s is on unless its 2^(s+1) block is in a constituent code.
  function automatic bit pe_on(barr_t fr, int s, int p, int min_log);
    int m;
    m = log2i(fr.size());
    for (int a = s + 1; a <= m; a++)
      if (block_kind(fr, a, p >> s >> (a - s - 1), min_log) != 0) return 1'b0;
    return 1'b1;
  endfunction

  // Full decoding; returns the number of iterations run. Node roles are
  // worked out once per call.
  function automatic int decode(input int llr[], input barr_t fr, input int max_iter,
                                input int min_log, output barr_t xh, output barr_t uh,
                                output bit conv, output int pe_ops);
    int n, m, it;
    int L[][], R[][], role[][], reff[];
    bit pon[][];
    n = llr.size(); m = log2i(n);
    L = new[m + 1]; R = new[m + 1]; role = new[m + 1]; pon = new[m];
    for (int c = 0; c <= m; c++) begin
      L[c] = new[n]; R[c] = new[n]; role[c] = new[n];
      for (int i = 0; i < n; i++) begin
        L[c][i] = 0; R[c][i] = 0; role[c][i] = node_role(fr, c, i, min_log);
      end
    end
    for (int s = 0; s < m; s++) begin
      pon[s] = new[n / 2];
      for (int p = 0; p < n / 2; p++) pon[s][p] = pe_on(fr, s, p, min_log);
    end
    foreach (llr[i]) L[m][i] = llr[i];
    reff = new[n];
    pe_ops = 0;
    conv = 1'b0;
    xh = new[n];
    for (it = 1; it <= max_iter; it++) begin
      // right-to-left pass
      for (int s = m - 1; s >= 0; s--) begin
        int h;
        h = 1 << s;
        for (int i = 0; i < n; i++)
          reff[i] = (role[s][i] == 1) ? LLR_MAX : (role[s][i] == 2) ? 0 : R[s][i];
        for (int i = 0; i < n; i++) begin
          int p;
          if ((i & h) != 0) continue;
          p = ((i >> (s + 1)) << s) | (i & (h - 1));
          if (!pon[s][p]) continue;
          pe_ops++;
          L[s][i]     = gi(L[s+1][i], clampi(L[s+1][i+h] + reff[i+h]));
          L[s][i + h] = clampi(gi(reff[i], L[s+1][i]) + L[s+1][i+h]);
        end
      end
      // left-to-right pass
      for (int s = 0; s <= m; s++) begin
        for (int i = 0; i < n; i++) begin
          int sz, lo, acc, mn, ng;
          sz = 1 << s; lo = (i >> s) << s;
          case (role[s][i])
            1: reff[i] = LLR_MAX;
            2: reff[i] = 0;
            3: begin
              acc = 0;
              for (int k = lo; k < lo + sz; k++) if (k != i) acc += L[s][k];
              reff[i] = clampi(acc); R[s][i] = reff[i];
            end
            4: begin
              mn = LLR_MAX; ng = 0;
              for (int k = lo; k < lo + sz; k++)
                if (k != i) begin
                  int a;
                  a = (L[s][k] < 0) ? -L[s][k] : L[s][k];
                  if (a < mn) mn = a;
                  if (L[s][k] < 0) ng ^= 1;
                end
              reff[i] = (ng != 0) ? -mn : mn; R[s][i] = reff[i];
            end
            default: reff[i] = R[s][i];
          endcase
        end
        if (s == m) break;
        begin
          int h;
          h = 1 << s;
          for (int i = 0; i < n; i++) begin
            int p;
            if ((i & h) != 0) continue;
            p = ((i >> (s + 1)) << s) | (i & (h - 1));
            if (!pon[s][p]) continue;
            pe_ops++;
            R[s+1][i]     = gi(reff[i], clampi(L[s+1][i+h] + reff[i+h]));
            R[s+1][i + h] = clampi(gi(reff[i], L[s+1][i]) + reff[i+h]);
          end
        end
      end
      // check on the codeword column (reff holds column m now)
      for (int i = 0; i < n; i++) xh[i] = (clampi(reff[i] + L[m][i]) > 0) ? 1'b0 : 1'b1;
      uh = polar_encode(xh);
      conv = 1'b1;
      for (int i = 0; i < n; i++) if (fr[i] && uh[i]) conv = 1'b0;
      if (conv) break;
    end
    return (it > max_iter) ? max_iter : it;
  endfunction

  // Quantised channel LLR of one BPSK symbol (bit 0 -> +1) over AWGN with
  // noise standard deviation sigma: LLR = 2y/sigma^2, scaled by `scale`
  // LSBs per unit and clamped.
  function automatic int channel_llr(bit x, real sigma, real scale);
    real u1, u2, g, y, l;
    u1 = (real'($urandom_range(1, 1000000))) / 1000001.0;
    u2 = (real'($urandom_range(0, 1000000))) / 1000001.0;
    g  = $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
    y  = (x ? -1.0 : 1.0) + sigma * g;
    l  = 2.0 * y / (sigma * sigma) * scale;
    return clampi(int'(l));
  endfunction

endpackage
