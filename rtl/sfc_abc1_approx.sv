// sfc_abc1_approx: approximate sign-focused compressor for A + B + C + 1.
//
// Two outputs only, value = sum + 2*carry (1..3), against an exact value of
// 1..4. The truth table is the one given for the proposed design:
//   A B C : carry sum | approx exact
//   0 0 0 :   0    1  |   1     1
//   0 0 1 :   1    1  |   3     2
//   0 1 0 :   1    1  |   3     2
//   0 1 1 :   1    1  |   3     3
//   1 0 0 :   1    0  |   2     2
//   1 0 1 :   1    1  |   3     3
//   1 1 0 :   1    1  |   3     3
//   1 1 1 :   1    1  |   3     4
// i.e. carry = A | B | C and sum = ~A | B | C. The error is placed on the sum
// bit and on the input patterns that are rare when A is a NAND partial product
// (probability 3/4 of being 1) and B, C are AND partial products (1/4).
// In the multiplier all three inputs are AND partial products (the negative
// one of that column is replaced by the constant). Combinational.
module sfc_abc1_approx (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic sum,    // weight 1
  output logic carry   // weight 2
);
  assign carry = a | b | c;
  assign sum   = ~a | b | c;
endmodule
