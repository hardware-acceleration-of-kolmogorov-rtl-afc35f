// kan_pkg: shared constants, types and helper functions of the KAN layer
// accelerator.
//
// The default configuration is the worked example of the design: 8-bit
// inputs (n = 8), B-splines of order K = 3 on a grid of G = 5 intervals, so
// G + K = 8 basis functions B_0..B_7 per input. LD is the largest integer
// with G * 2^LD <= 2^n (PowerGap with alignment), which for G = 5 gives
// LD = 5: each knot interval is 32 input codes wide and the usable input
// range is 0..159. B(X) values are 2N-bit words (N = 3, i.e. 6 bits) fed to
// the 2^N:1 time-modulation dynamic-voltage input generator; spline
// coefficients c_i' are 8-bit signed.
//
// sam_row() is the sparsity-aware row order: inside each input's group of
// G + K word lines, the central basis functions (most often active) are
// placed nearest the bit-line clamp (row 0 of the group is nearest) and the
// outermost ones furthest away.
package kan_pkg;

  localparam int unsigned XW   = 8;   // input precision n (bits)
  localparam int unsigned G    = 5;   // grid intervals
  localparam int unsigned K    = 3;   // spline order
  localparam int unsigned N    = 3;   // TM-DV-IG N: B(X) words are 2N bits
  localparam int unsigned CW   = 8;   // coefficient c_i' width (signed)
  localparam int unsigned M_IN = 17;  // inputs of one layer (knot-theory 17x1x14)
  localparam int unsigned COLS = 14;  // bit-line columns of the array

  // Largest LD with g * 2^LD <= 2^xw (Eq. 6).
  function automatic int unsigned calc_ld(input int unsigned g, input int unsigned xw);
    int unsigned ld;
    ld = 0;
    while ((g << (ld + 1)) <= (1 << xw)) ld++;
    return ld;
  endfunction

  localparam int unsigned LD = calc_ld(G, XW);

  // Sparsity-aware physical position of basis function i (0..nb-1) inside
  // its input's row group. The middle of the index range gets position 0
  // (nearest the clamp); positions alternate outwards: for nb = 8 the order
  // nearest-to-furthest is B3, B4, B2, B5, B1, B6, B0, B7.
  function automatic int unsigned sam_row(input int unsigned i, input int unsigned nb);
    int unsigned c;   // lower centre index
    c = (nb - 1) / 2;
    if (i <= c) return 2 * (c - i);
    else        return 2 * (i - c) - 1;
  endfunction

endpackage
