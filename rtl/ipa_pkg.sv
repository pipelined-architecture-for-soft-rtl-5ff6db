// ipa_pkg -- constants and index functions shared by the soft-decision IPA
// decoder for second-order Reed-Muller codes RM(m,2).
//
// The decoder works on vectors of n = 2^m log-likelihood ratios (LLRs).
// Projection number i (1 <= i < n) pairs every coordinate z with z ^ i. The
// pairs are numbered 0 .. n/2-1 in the order produced by the recursive
// Reorder procedure: with h the position of the most significant one of i,
// pair p holds coordinate ja = p with a zero bit inserted at position h, and
// jb = ja ^ i. The projected vector is indexed by p, and because p -> {ja,jb}
// is linear, a second-order codeword projects onto a first-order codeword in
// p-coordinates. The same numbering is used in reverse (RevReorder) by the
// pre-aggregation step. Projection 0 is a dummy that yields the all-zero
// vector, so that the averaging tree sees a power-of-two number of inputs.
//
// The functions below are evaluated at elaboration time to build the fixed
// crossbars; they hold no state.
package ipa_pkg;

  // Defaults: RM(7,2), four processing units, 5-bit Q(3:2) LLRs and two
  // iterations, the configuration reported with a per-block breakdown.
  parameter int unsigned M_DEFAULT    = 7;
  parameter int unsigned P_DEFAULT    = 4;
  parameter int unsigned W_DEFAULT    = 5;
  parameter int unsigned NMAX_DEFAULT = 2;

  // Position of the most significant one of i (i > 0).
  function automatic int unsigned msb_pos(int unsigned i);
    int unsigned h;
    h = 0;
    for (int unsigned b = 0; b < 32; b++)
      if (i[b]) h = b;
    return h;
  endfunction

  // First coordinate ja of pair p of projection i: p with a zero inserted at
  // bit position msb_pos(i). The second coordinate is ja ^ i.
  function automatic int unsigned pair_a(int unsigned p, int unsigned i);
    int unsigned h;
    h = msb_pos(i);
    return ((p >> h) << (h + 1)) | (p & ((32'd1 << h) - 1));
  endfunction

  // Pair number of coordinate z under projection i: the pair member whose
  // bit msb_pos(i) is clear, with that bit removed.
  function automatic int unsigned pair_of(int unsigned z, int unsigned i);
    int unsigned h, za;
    h  = msb_pos(i);
    za = z[h] ? (z ^ i) : z;   // the member of the pair with bit h clear
    return ((za >> (h + 1)) << h) | (za & ((32'd1 << h) - 1));
  endfunction

  // Latency of the first-order decoder in cycles: the FHT takes two register
  // stages for projected vectors of 64 or more coordinates, one otherwise.
  function automatic int unsigned fod_latency(int unsigned k);
    return (k >= 6) ? 4 : 3;
  endfunction

  // Depth of the register array, D = ceil(t_agg / (n/P)) + 1, with t_agg the
  // cycles from a vector's arrival to its first pre-aggregation (input
  // register, projection and first-order decoder).
  function automatic int unsigned regarr_depth(int unsigned m, int unsigned p);
    int unsigned g, t_agg;
    g     = (32'd1 << m) / p;
    t_agg = 1 + 1 + fod_latency(m - 1);
    return (t_agg + g - 1) / g + 1;
  endfunction

endpackage
