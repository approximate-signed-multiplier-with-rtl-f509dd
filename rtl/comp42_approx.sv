// comp42_approx: approximate 4:2 compressor with two outputs,
// sum + 2*carry = min(x1 + x2 + x3 + x4, 3).
//
// The multiplier uses one approximate 4:2 compressor, in column 2^8 of its
// second reduction stage. The source takes that cell from earlier work (a
// probability-based approximate 4:2 compressor) and gives neither its gates
// nor its truth table. This design uses the simplest two-output compressor
// that is exact wherever two outputs can be: it is wrong only when all four
// inputs are 1 (result 3 instead of 4), a case of probability 1/256 for
// independent AND partial products. carry = (at least two inputs set),
// sum = (one, three or four inputs set). Combinational.
module comp42_approx (
  input  logic x1,
  input  logic x2,
  input  logic x3,
  input  logic x4,
  output logic sum,    // weight 1
  output logic carry   // weight 2
);
  logic p12, p34, g12, g34;

  assign p12   = x1 ^ x2;
  assign p34   = x3 ^ x4;
  assign g12   = x1 & x2;
  assign g34   = x3 & x4;
  assign carry = g12 | g34 | (p12 & p34);
  assign sum   = (p12 ^ p34) | (g12 & g34);
endmodule
