// csa_pkg: shared constants and elaboration-time functions for the reversible
// carry skip adder.
//
// The variable block layout follows the scheme b, b+1, ..., b+t/2-1,
// b+t/2-1, ..., b+1, b: t blocks (t even), the outer two blocks b bits wide,
// widths growing by one towards the middle. Summing the widths gives
//   N = t*b + t*t/4 - t/2,   i.e.   b = N/t - t/4 + 1/2.
// (The printed form of that relation has N/2 where N/t is meant; N/t is the
// one that follows from the layout and the one the later delay formula uses.)
// The fixed layout is t blocks of b bits each, N = t*b.
//
// The delay functions give the analytical worst-case path, counted in Peres
// gates, of the structure as published (a single Peres gate producing each
// block carry out). They are elaboration-time helpers for documentation and
// testbenches; no hardware depends on them.
package csa_pkg;

  // Width of block i (0 = least significant) of a t-block adder whose outer
  // blocks are b bits wide.
  function automatic int unsigned blk_width(bit variable, int unsigned b,
                                            int unsigned t, int unsigned i);
    if (!variable) return b;
    return (i < t / 2) ? b + i : b + (t - 1 - i);
  endfunction

  // Bit position of the least significant bit of block i.
  function automatic int unsigned blk_lsb(bit variable, int unsigned b,
                                          int unsigned t, int unsigned i);
    int unsigned s = 0;
    for (int unsigned k = 0; k < i; k++) s += blk_width(variable, b, t, k);
    return s;
  endfunction

  // Total adder width.
  function automatic int unsigned total_width(bit variable, int unsigned b,
                                              int unsigned t);
    return blk_lsb(variable, b, t, t);
  endfunction

  // ceil(log2(x)) for x >= 1.
  function automatic int unsigned clog2(int unsigned x);
    int unsigned r = 0;
    while ((1 << r) < x) r++;
    return r;
  endfunction

  // Ripple delay through a B-bit block, eq. (1): B + 1 gates.
  function automatic int unsigned d_ripple(int unsigned b);
    return b + 1;
  endfunction

  // Skip delay of a B-bit block, eq. (2): ceil(log2 B) + 3 gates.
  function automatic int unsigned d_skip(int unsigned b);
    return clog2(b) + 3;
  endfunction

  // Worst-case delay of the whole adder: ripple through the first block,
  // skip over the inner ones, ripple through the last (eq. 3 and eq. 9).
  function automatic int unsigned t_worst(bit variable, int unsigned b,
                                          int unsigned t);
    int unsigned d;
    if (t == 1) return d_ripple(b);
    d = d_ripple(blk_width(variable, b, t, 0)) +
        d_ripple(blk_width(variable, b, t, t - 1));
    for (int unsigned k = 1; k + 1 < t; k++)
      d += d_skip(blk_width(variable, b, t, k));
    return d;
  endfunction

endpackage
