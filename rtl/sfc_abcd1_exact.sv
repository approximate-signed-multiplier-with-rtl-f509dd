// sfc_abcd1_exact: exact sign-focused compressor computing A + B + C + D + 1.
//
// A is the negative (NAND) partial product, B, C and D positive (AND) ones;
// the constant '1' of the partial-product matrix is absorbed. Unlike a
// compressor that only adds a constant, it reduces one partial product: five
// bits of one weight (four inputs and the constant) leave as three,
// value = sum + 2*carry + 2*cout (1..5).
//
// The outputs are exactly the Cout / Carry / Sum columns of the published
// truth table, copied row by row below (sum is the parity of the total and
// carry equals B | C; cout carries the rest). In the 8-bit multiplier it sits
// in column 2^8, where it takes the Baugh-Wooley constant '1'.
// Combinational.
module sfc_abcd1_exact (
  input  logic a,      // negative partial product
  input  logic b,
  input  logic c,
  input  logic d,
  output logic sum,    // weight 1
  output logic carry,  // weight 2
  output logic cout    // weight 2
);
  always_comb begin
    unique case ({a, b, c, d})
      //                      cout  carry sum
      4'b0000: {cout, carry, sum} = 3'b0_0_1;
      4'b0001: {cout, carry, sum} = 3'b1_0_0;
      4'b0010: {cout, carry, sum} = 3'b0_1_0;
      4'b0011: {cout, carry, sum} = 3'b0_1_1;
      4'b0100: {cout, carry, sum} = 3'b0_1_0;
      4'b0101: {cout, carry, sum} = 3'b0_1_1;
      4'b0110: {cout, carry, sum} = 3'b0_1_1;
      4'b0111: {cout, carry, sum} = 3'b1_1_0;
      4'b1000: {cout, carry, sum} = 3'b1_0_0;
      4'b1001: {cout, carry, sum} = 3'b1_0_1;
      4'b1010: {cout, carry, sum} = 3'b0_1_1;
      4'b1011: {cout, carry, sum} = 3'b1_1_0;
      4'b1100: {cout, carry, sum} = 3'b0_1_1;
      4'b1101: {cout, carry, sum} = 3'b1_1_0;
      4'b1110: {cout, carry, sum} = 3'b1_1_0;
      default: {cout, carry, sum} = 3'b1_1_1;   // 4'b1111
    endcase
  end
endmodule
