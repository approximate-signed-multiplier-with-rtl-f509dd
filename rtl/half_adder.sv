// half_adder: one-bit half adder, sum = a ^ b, carry = a & b.
// Helper cell of the multiplier's reduction tree (columns 2^7, 2^12, 2^14).
// Purely combinational.
module half_adder (
  input  logic a,
  input  logic b,
  output logic sum,
  output logic carry
);
  assign sum   = a ^ b;
  assign carry = a & b;
endmodule
