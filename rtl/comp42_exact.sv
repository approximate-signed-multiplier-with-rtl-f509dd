// comp42_exact: exact 4:2 compressor, x1 + x2 + x3 + x4 + cin =
// sum + 2*(carry + cout).
//
// Used in the most significant part of the multiplier, where all additions
// must be exact. Built from two full adders: the first adds x1..x3 and
// produces cout, which therefore does not depend on cin, so a row of these
// compressors can pass cout to the next column's cin without a ripple path.
// The source names a specific exact compressor cell from earlier work without
// describing its gates; any exact realisation gives the same numbers, and this
// is the textbook one. Combinational.
module comp42_exact (
  input  logic x1,
  input  logic x2,
  input  logic x3,
  input  logic x4,
  input  logic cin,
  output logic sum,    // weight 1
  output logic carry,  // weight 2
  output logic cout    // weight 2, independent of cin
);
  logic s1;

  full_adder u_fa1 (.a(x1), .b(x2), .c(x3),  .sum(s1),  .carry(cout));
  full_adder u_fa2 (.a(s1), .b(x4), .c(cin), .sum(sum), .carry(carry));
endmodule
