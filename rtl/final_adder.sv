// final_adder: W-bit adder that merges the two rows left by the multiplier's
// partial-product reduction into one, s = (a + b) mod 2^W.
//
// The source calls this last stage an N-bit carry-save adder and shows it as
// one addition of two rows over columns 2^8 .. 2^15. Since it has to yield a
// single row, it is built here as a ripple-carry chain of W full adders; the
// carry out of the top bit has weight 2^16 and is dropped, as in any
// two's-complement product of this width. Combinational.
module final_adder #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] s
);
  logic [W-1:0] c;          // c[k]: carry into bit k

  assign c[0] = 1'b0;

  for (genvar k = 0; k < int'(W) - 1; k++) begin : g_bit
    full_adder u_fa (.a(a[k]), .b(b[k]), .c(c[k]), .sum(s[k]), .carry(c[k+1]));
  end

  // top bit: its carry would have weight 2^W and is not needed
  assign s[W-1] = a[W-1] ^ b[W-1] ^ c[W-1];
endmodule
