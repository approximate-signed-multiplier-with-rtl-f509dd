// sfc_abc1_exact: exact sign-focused compressor computing A + B + C + 1.
//
// A sign-focused compressor absorbs a constant '1' of the Baugh-Wooley
// partial-product matrix together with three partial products: A is the
// negative (NAND) partial product, B and C are positive (AND) ones. The
// result, 1..4, is returned as sum + 2*carry + 2*cout (sum has the weight of
// the inputs, carry and cout the next weight up).
//
// The arithmetic (S_exact column of the truth-table comparison) follows the
// source; how the upper part is split between carry and cout is this design's
// choice: carry = B | C depends only on the positive inputs, and cout takes the
// remainder, which is 1 only when A = 1 and B = C.
//
// Not used by the 8-bit multiplier of this design (its CSP uses the
// approximate A+B+C+1 and the exact/approximate A+B+C+D+1 versions); kept as
// the exact member of the compressor family. Combinational.
module sfc_abc1_exact (
  input  logic a,      // negative partial product
  input  logic b,
  input  logic c,
  output logic sum,    // weight 1
  output logic carry,  // weight 2
  output logic cout    // weight 2
);
  assign sum   = ~(a ^ b ^ c);
  assign carry = b | c;
  assign cout  = a & ~(b ^ c);
endmodule
