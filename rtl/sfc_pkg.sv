// sfc_pkg: types and constants shared by the approximate signed multiplier and
// the Laplacian edge-detection datapath built around it.
//
// The multiplier is an 8 x 8 two's-complement (Baugh-Wooley) multiplier; its
// operand and product types are defined here. The edge detector multiplies
// signed 8-bit samples by the fixed 3 x 3 Laplacian kernel
//     -1 -1 -1
//     -1  8 -1
//     -1 -1 -1
// and sums nine 16-bit products, so its accumulator needs 16 + 4 bits.
// The accumulator width is this design's choice (the smallest that cannot
// overflow for nine 16-bit terms).
package sfc_pkg;

  localparam int unsigned MULT_N = 8;                 // operand width
  localparam int unsigned PROD_W = 2 * MULT_N;        // product width
  localparam int unsigned TAPS   = 9;                 // 3 x 3 kernel
  localparam int unsigned ACC_W  = PROD_W + 4;        // ceil(log2(9)) guard bits

  typedef logic signed [MULT_N-1:0] operand_t;
  typedef logic signed [PROD_W-1:0] product_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic        [3:0]        tap_t;            // 0..8, row-major in the 3 x 3 patch

  // Laplacian kernel coefficient for tap t (row-major: t = 3*row + col).
  function automatic operand_t laplacian_coeff(tap_t t);
    return (t == tap_t'(4)) ? operand_t'(8) : operand_t'(-1);
  endfunction

endpackage
