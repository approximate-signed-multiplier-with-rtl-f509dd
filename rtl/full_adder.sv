// full_adder: one-bit full adder (3:2 counter), a + b + c = sum + 2*carry.
// Helper cell of the multiplier's reduction tree, of the exact 4:2 compressor
// and of the final adder. Purely combinational.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic sum,
  output logic carry
);
  assign sum   = a ^ b ^ c;
  assign carry = (a & b) | (c & (a ^ b));
endmodule
