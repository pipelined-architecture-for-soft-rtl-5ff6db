// tb_ipa_ref_pkg -- Reference model of soft-decision IPA decoding for the
// testbenches, written independently of the RTL: the projection pairs are
// found by walking the recursive Reorder procedure, first-order decoding is a
// brute-force correlation against every Hadamard row, and averaging is an
// explicit recursive pairwise mean. All values are plain ints; W is the LLR
// width used for clipping.
package tb_ipa_ref_pkg;

  typedef int ivec_t[];

  // Pair p of projection i on a vector of length n, by the Reorder
  // recursion: while i lies in the lower half of the current block, the
  // first half of the pairs comes from the lower half of the block and the
  // second half from the upper half.
  function automatic void ref_pair(int n, int i, int p, output int ja, output int jb);
    int off, len, q;
    off = 0; len = n; q = p;
    while (i < len / 2) begin
      if (q >= len / 4) begin
        off += len / 2;
        q   -= len / 4;
      end
      len /= 2;
    end
    ja = off + q;
    jb = off + (q ^ i);
  endfunction

  function automatic int clip(int v, int w);
    int mx;
    mx = (1 << (w - 1)) - 1;
    if (v > mx)  return mx;
    if (v < -mx - 1) return -mx - 1;
    return v;
  endfunction

  function automatic int iabs(int v);
    return (v < 0) ? -v : v;
  endfunction

  // Min-sum projection; i = 0 gives the zero vector.
  function automatic ivec_t ref_project(ivec_t l, int i, int w);
    ivec_t r;
    int n, ja, jb, mag;
    n = l.size();
    r = new[n / 2];
    for (int p = 0; p < n / 2; p++) begin
      if (i == 0) begin r[p] = 0; continue; end
      ref_pair(n, i, p, ja, jb);
      mag = (iabs(l[ja]) < iabs(l[jb])) ? iabs(l[ja]) : iabs(l[jb]);
      mag = clip(mag, w);
      r[p] = ((l[ja] < 0) != (l[jb] < 0)) ? -mag : mag;
    end
    return r;
  endfunction

  function automatic int parity(int v);
    return $countones(v) % 2;
  endfunction

  // Maximum-likelihood first-order decoding by correlation with every
  // codeword of RM(k,1); ties go to the lowest row index.
  function automatic ivec_t ref_fod(ivec_t l);
    ivec_t y;
    int nk, best, bestb, c;
    nk = l.size();
    best = -1; bestb = 0;
    y = new[nk];
    for (int b = 0; b < nk; b++) begin
      c = 0;
      for (int j = 0; j < nk; j++) c += parity(b & j) ? -l[j] : l[j];
      if (iabs(c) > best) begin
        best  = iabs(c);
        bestb = (c < 0) ? (b | nk) : b;  // bit nk carries lambda
      end
    end
    for (int j = 0; j < nk; j++)
      y[j] = ((bestb & nk) != 0) ^ parity(bestb & (nk - 1) & j);
    return y;
  endfunction

  // Pre-aggregation of decoded projection y of projection i against l.
  function automatic ivec_t ref_preagg(ivec_t l, ivec_t y, int i, int w);
    ivec_t a;
    int n, ja, jb;
    n = l.size();
    a = new[n];
    for (int z = 0; z < n; z++) a[z] = 0;
    if (i == 0) return a;
    for (int p = 0; p < n / 2; p++) begin
      ref_pair(n, i, p, ja, jb);
      a[ja] = y[p] ? clip(-l[jb], w) : l[jb];
      a[jb] = y[p] ? clip(-l[ja], w) : l[ja];
    end
    return a;
  endfunction

  // floor((a+b)/2), the divider's node.
  function automatic int avg2(int a, int b);
    int s;
    s = a + b;
    return (s >= 0) ? s / 2 : -((-s + 1) / 2);
  endfunction

  // Mean of vectors lo .. lo+cnt-1 of the set by a pairwise tree.
  function automatic int tree_mean(ivec_t vals, int lo, int cnt);
    if (cnt == 1) return vals[lo];
    return avg2(tree_mean(vals, lo, cnt / 2), tree_mean(vals, lo + cnt / 2, cnt / 2));
  endfunction

  // One IPA iteration on l (length n = 2^m).
  function automatic ivec_t ref_iteration(ivec_t l, int w);
    ivec_t out, col;
    ivec_t agg [];
    int n;
    n = l.size();
    agg = new[n];
    for (int i = 0; i < n; i++)
      agg[i] = ref_preagg(l, ref_fod(ref_project(l, i, w)), i, w);
    out = new[n];
    col = new[n];
    for (int z = 0; z < n; z++) begin
      for (int i = 0; i < n; i++) col[i] = agg[i][z];
      out[z] = tree_mean(col, 0, n);
    end
    return out;
  endfunction

  // Random codeword of RM(m,r), r <= 2: a random polynomial of degree <= r
  // in the m coordinate bits, evaluated at every position.
  function automatic ivec_t rand_codeword(int m, int r);
    ivec_t c;
    int n, a0;
    int a1 [];
    int a2 [];
    n = 1 << m;
    c = new[n];
    a1 = new[m];
    a2 = new[m * m];
    a0 = $urandom_range(0, 1);
    for (int u = 0; u < m; u++) a1[u] = $urandom_range(0, 1);
    for (int u = 0; u < m * m; u++) a2[u] = (r >= 2) ? $urandom_range(0, 1) : 0;
    for (int x = 0; x < n; x++) begin
      int b;
      b = a0;
      for (int u = 0; u < m; u++) begin
        b ^= a1[u] & ((x >> u) & 1);
        for (int v = u + 1; v < m; v++)
          b ^= a2[u * m + v] & ((x >> u) & 1) & ((x >> v) & 1);
      end
      c[x] = b;
    end
    return c;
  endfunction

  // Approximately Gaussian sample, sigma in units of 1/1000, by the sum of
  // twelve uniforms; result scaled by 1000.
  function automatic int gauss_milli(int sigma_milli);
    int s;
    s = 0;
    for (int k = 0; k < 12; k++) s += $urandom_range(0, 1000);
    return ((s - 6000) * sigma_milli) / 1000;
  endfunction

  // BPSK over AWGN and Q(qi:qf) quantisation of the LLR 2y/sigma^2:
  // returns W-bit integers, value = llr * 2^qf, clipped.
  function automatic ivec_t channel(ivec_t c, int sigma_milli, int qf, int w);
    ivec_t l;
    int n, y, llr_q;
    n = c.size();
    l = new[n];
    for (int z = 0; z < n; z++) begin
      y = (c[z] ? -1000 : 1000) + gauss_milli(sigma_milli);   // y * 1000
      // llr = 2*y/sigma^2; scaled by 2^qf and rounded
      llr_q = (2 * y * 1000 * (1 << qf)) / (sigma_milli * sigma_milli);
      l[z] = clip(llr_q, w);
    end
    return l;
  endfunction

endpackage
