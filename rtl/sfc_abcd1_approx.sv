// sfc_abcd1_approx: approximate sign-focused compressor for A + B + C + D + 1.
//
// A is the negative (NAND) partial product, B, C, D positive (AND) ones, and a
// constant '1' is absorbed. Only two outputs remain, value = sum + 2*carry
// (at most 3), so the cout of the exact version is gone. The Carry / Sum
// columns of the published truth table are copied below; they give
// carry = A | B | C | D, and the value falls short of the exact one by 1 for
// ABCD = 0011, 0111, 1011, 1101, 1110 and by 2 for 1111 (the rows that are
// least likely when A is 1 with probability 3/4 and B, C, D with 1/4).
//
// In the 8-bit multiplier it sits in column 2^7 and absorbs the compensation
// constant placed there. Combinational.
module sfc_abcd1_approx (
  input  logic a,      // negative partial product
  input  logic b,
  input  logic c,
  input  logic d,
  output logic sum,    // weight 1
  output logic carry   // weight 2
);
  always_comb begin
    unique case ({a, b, c, d})
      //                  carry sum
      4'b0000: {carry, sum} = 2'b0_1;
      4'b0001: {carry, sum} = 2'b1_0;
      4'b0010: {carry, sum} = 2'b1_0;
      4'b0011: {carry, sum} = 2'b1_0;
      4'b0100: {carry, sum} = 2'b1_0;
      4'b0101: {carry, sum} = 2'b1_1;
      4'b0110: {carry, sum} = 2'b1_1;
      4'b0111: {carry, sum} = 2'b1_1;
      4'b1000: {carry, sum} = 2'b1_0;
      4'b1001: {carry, sum} = 2'b1_1;
      4'b1010: {carry, sum} = 2'b1_1;
      4'b1011: {carry, sum} = 2'b1_1;
      4'b1100: {carry, sum} = 2'b1_1;
      4'b1101: {carry, sum} = 2'b1_1;
      4'b1110: {carry, sum} = 2'b1_1;
      default: {carry, sum} = 2'b1_1;   // 4'b1111
    endcase
  end
endmodule
