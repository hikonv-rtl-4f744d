// hikonv_pkg: constants and sizing functions shared by the HiKonv blocks.
//
// HiKonv puts several low-bitwidth operands into each input of one wide
// multiplier, spaced S bits apart, so that a single product holds the N+K-1
// outputs of a short 1-D convolution. This package computes the slice size S
// from the operand bitwidths p, q and the number of guard bits Gb (the three
// cases of the paper's slice-size equation), and the number of operands that
// fit into a multiplier input of a given width.
//
// Design choice: every operand keeps one spare bit above its top slice. The
// multiplier is a signed one (as the DSP48E2 is), and for signed packing the
// top slice can reach f-1, which needs one bit more than f. The paper's bound
// p+(N-1)S <= Bit_A has no spare bit; for the 27x18, 4-bit case both give
// N=2 and K=3.
package hikonv_pkg;

  // Slice size S for p-bit and q-bit operands with gb guard bits.
  function automatic int unsigned hk_slice(int unsigned p, int unsigned q,
                                           int unsigned gb);
    if (p == 1 && q >= 1)      return q + gb;
    else if (q == 1 && p >= 1) return p + gb;
    else                       return p + q + gb;
  endfunction

  // Largest count of eb-bit operands that fit a bits-wide signed operand with
  // s-bit spacing, keeping one spare bit above the top slice.
  function automatic int unsigned hk_fit(int unsigned bits, int unsigned eb,
                                         int unsigned s);
    if (bits < eb + 1) return 0;
    return (bits - eb - 1) / s + 1;
  endfunction

  // Largest magnitude of one product of a p-bit and a q-bit operand.
  function automatic longint unsigned hk_prod_max(int unsigned p, int unsigned q,
                                                  bit signed_mode);
    if (signed_mode) return longint'(1) << (p + q - 2);
    return ((longint'(1) << p) - 1) * ((longint'(1) << q) - 1);
  endfunction

  // True when the sum of `terms` products still fits one S-bit segment.
  function automatic bit hk_guard_ok(int unsigned p, int unsigned q,
                                     int unsigned s, int unsigned terms,
                                     bit signed_mode);
    longint unsigned lim;
    lim = signed_mode ? (longint'(1) << (s - 1)) - 1 : (longint'(1) << s) - 1;
    return longint'(terms) * hk_prod_max(p, q, signed_mode) <= lim;
  endfunction

endpackage
