// ppc_pkg -- shared types and elaboration-time range analysis for
// partially-precise computational (PPC) blocks.
//
// A PPC block is an adder or multiplier that must be exact only for the input
// values that can actually reach it; for every other input its output is a
// don't-care (DC). This package performs the range analysis that decides which
// values can occur, entirely as constant functions evaluated at elaboration:
//
//   * A value set over 0..4095 is held as a 4096-bit mask (vmask_t), bit v set
//     when value v can occur. Words of up to 12 bits (the widest word in the
//     three datapaths) are covered.
//   * pre_mask() gives the set seen after a primary input has passed through
//     its natural range [nat_lo, nat_hi] and the preprocessing (TH_x^y, then
//     DS_x), exactly as ppc_preproc computes it.
//   * shl_mask() and sum_mask() propagate sets through a left shift and through
//     an adder, so that deeper adders see the sparsity of their operands
//     (e.g. the DS_2-like sparsity a 1-bit shift creates).
//   * nib_mask() and carry_mask() project a set onto one 4-bit segment and onto
//     the carry into that segment; the 4-bit PPA and 4x4 PPM segments use these
//     to place their DCs.
//
// Timing: nothing here produces hardware; all results are parameters.
// The representation by masks and the decision to treat the two operands of a
// block as independent (so a segment's allowed rows are the product of its
// operands' allowed nibbles) are choices of this design; they can only add
// exact rows, never make an occurring row a DC.
package ppc_pkg;

  localparam int unsigned MASK_BITS = 4096;
  typedef logic [MASK_BITS-1:0] vmask_t;

  // Every value 0 .. 2^wl-1 allowed: the conventional (precise) block.
  localparam vmask_t ALL8 = vmask_t'({256{1'b1}});

  // Preprocessing of one value: TH_x^y (v < x -> y), then DS_x (clear v mod x).
  function automatic int unsigned preproc_value(int unsigned v, int unsigned ds,
                                                int unsigned th_x, int unsigned th_y);
    int unsigned t;
    t = (v < th_x) ? th_y : v;
    return t - (t % ds);
  endfunction

  function automatic vmask_t full_mask(int unsigned wl);
    vmask_t r;
    r = '0;
    for (int unsigned v = 0; v < (1 << wl); v++) r[v] = 1'b1;
    return r;
  endfunction

  // Set of values after natural range restriction and preprocessing.
  function automatic vmask_t pre_mask(int unsigned wl, int unsigned ds,
                                      int unsigned th_x, int unsigned th_y,
                                      int unsigned nat_lo, int unsigned nat_hi);
    vmask_t r;
    r = '0;
    for (int unsigned v = 0; v < (1 << wl); v++)
      if (v >= nat_lo && v <= nat_hi) r[preproc_value(v, ds, th_x, th_y)] = 1'b1;
    return r;
  endfunction

  // Set of v << s (that is, v * 2^s) for v in m.
  function automatic vmask_t shl_mask(vmask_t m, int unsigned s);
    vmask_t r;
    r = '0;
    for (int unsigned v = 0; (v << s) < MASK_BITS; v++)
      if (m[v]) r[v << s] = 1'b1;
    return r;
  endfunction

  // Set of a + b (truncated to wl_out bits) for a in ma, b in mb.
  function automatic vmask_t sum_mask(vmask_t ma, vmask_t mb, int unsigned wl_out);
    vmask_t r;
    r = '0;
    for (int unsigned a = 0; a < MASK_BITS; a++)
      if (ma[a]) r |= (mb << a);
    return r & full_mask(wl_out);
  endfunction

  // Which values the 4-bit slice [4*seg +: 4] takes over the set m.
  function automatic logic [15:0] nib_mask(vmask_t m, int unsigned seg);
    logic [15:0] r;
    r = '0;
    for (int unsigned v = 0; v < MASK_BITS; v++)
      if (m[v]) r[(v >> (4 * seg)) & 15] = 1'b1;
    return r;
  endfunction

  // Which carries can enter segment seg of a + b: bit 0 set if carry 0 can
  // occur, bit 1 if carry 1 can. The operands are independent, so the sum of
  // the low parts spans [min_a + min_b, max_a + max_b] at its two ends.
  function automatic logic [1:0] carry_mask(vmask_t ma, vmask_t mb, int unsigned seg);
    int unsigned lim, mina, maxa, minb, maxb, lo;
    bit any_a, any_b;
    if (seg == 0) return 2'b01;
    lim = 1 << (4 * seg);
    mina = lim; maxa = 0; minb = lim; maxb = 0; any_a = 0; any_b = 0;
    for (int unsigned v = 0; v < MASK_BITS; v++) begin
      lo = v % lim;
      if (ma[v]) begin any_a = 1; if (lo < mina) mina = lo; if (lo > maxa) maxa = lo; end
      if (mb[v]) begin any_b = 1; if (lo < minb) minb = lo; if (lo > maxb) maxb = lo; end
    end
    if (!any_a || !any_b) return 2'b01;
    return {(maxa + maxb >= lim), (mina + minb < lim)};
  endfunction

  // Number of set bits of a mask (for reporting sparsity).
  function automatic int unsigned mask_count(vmask_t m);
    int unsigned n;
    n = 0;
    for (int unsigned v = 0; v < MASK_BITS; v++) n += m[v];
    return n;
  endfunction

endpackage
