// bw_pp_gen: Baugh-Wooley partial-product generator for an N x N signed
// (two's complement) multiplier.
//
// Writing A = -a[N-1]*2^(N-1) + sum a[i]*2^i (and B likewise), the product
// splits into four groups of bit products a[i]*b[j] of weight 2^(i+j):
//   * i < N-1 and j < N-1 : positive, generated with AND;
//   * exactly one of i, j equal to N-1 : negative; Baugh-Wooley adds its
//     complement instead (a NAND) and folds the correction into two constant
//     ones at weights 2^N and 2^(2N-1);
//   * i = j = N-1 : positive, AND.
// This module produces only the N*N gated bits; the two constant ones are
// placed by the reduction tree that consumes them (in the approximate
// multiplier the tree also adds compensation constants).
//
// Interface: pp[i][j] is the bit of weight 2^(i+j) formed from a[i] and b[j].
// Combinational, no clock.
module bw_pp_gen #(
  parameter int unsigned N = 8
) (
  input  logic [N-1:0]         a,
  input  logic [N-1:0]         b,
  output logic [N-1:0][N-1:0]  pp
);
  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      for (int j = 0; j < int'(N); j++) begin
        if ((i == int'(N) - 1) != (j == int'(N) - 1))
          pp[i][j] = ~(a[i] & b[j]);   // negative partial product (NAND)
        else
          pp[i][j] = a[i] & b[j];      // positive partial product (AND)
      end
    end
  end
endmodule
