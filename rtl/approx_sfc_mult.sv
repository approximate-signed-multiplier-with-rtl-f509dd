// approx_sfc_mult: 8 x 8 approximate signed multiplier built on sign-focused
// compressors, truncation and constant error compensation.
//
// The Baugh-Wooley partial-product matrix (AND bits, NAND bits where exactly
// one operand sign bit is involved, constant ones at 2^8 and 2^15) is split
// into three column groups:
//   LSP, columns 2^0 .. 2^6: truncated. Their expected value,
//        sum_{q=0..6} (1/4)(q+1) 2^q = 192.25, is replaced by constant ones
//        at 2^7 and 2^6 (= 192). Bits 5..0 of the product are therefore 0 and
//        bit 6 is always 1.
//   CSP, columns 2^7 and 2^8: sign-focused compressors.
//        2^7: approximate A+B+C+D+1 on {compensation 1, ~(a0 b7), a1 b6,
//             a2 b5, a3 b4}; approximate A+B+C+1 on {a4 b3, a5 b2, a6 b1} with
//             the NAND bit ~(a7 b0) replaced by a constant 1 (a NAND bit is 1
//             with probability 3/4).
//        2^8: exact A+B+C+D+1 on {Baugh-Wooley 1, ~(a1 b7), a2 b6, a3 b5,
//             a4 b4}; full adder on {a5 b3, a6 b2, ~(a7 b1)}.
//   MSP, columns 2^9 .. 2^15: exact full/half adders and exact 4:2
//        compressors (seven of them over two stages).
// Stage 2 adds a half adder at 2^7 and an approximate 4:2 compressor at 2^8;
// stage 3 is an 8-bit addition of the two remaining rows over 2^8 .. 2^15.
//
// Which bit goes into which compressor input follows the row order of the
// published dot diagram (top row = a0); the diagram does not label the
// inputs, so that mapping, the approximate 4:2 cell (see comp42_approx) and
// the use of the free cin of the 2^9 compressor for ~(a7 b2) are this
// design's reading. The product is returned as 16-bit two's complement.
//
// Interface: a, b signed 8-bit operands, p signed 16-bit approximate product.
// Purely combinational; no clock, no latency.
module approx_sfc_mult
  import sfc_pkg::*;
(
  input  operand_t a,
  input  operand_t b,
  output product_t p
);
  localparam int unsigned N = MULT_N;

  logic [N-1:0][N-1:0] pp;   // pp[i][j]: weight 2^(i+j), from a[i] and b[j]

  bw_pp_gen #(.N(N)) u_pp (.a(a), .b(b), .pp(pp));

  // ---------------------------------------------------------------- stage 1
  // column 2^7 (CSP)
  logic c7a_sum, c7a_carry, c7b_sum, c7b_carry;
  sfc_abcd1_approx u_c7a (.a(pp[0][7]), .b(pp[1][6]), .c(pp[2][5]), .d(pp[3][4]),
                          .sum(c7a_sum), .carry(c7a_carry));
  sfc_abc1_approx  u_c7b (.a(pp[4][3]), .b(pp[5][2]), .c(pp[6][1]),
                          .sum(c7b_sum), .carry(c7b_carry));

  // column 2^8 (CSP)
  logic c8a_sum, c8a_carry, c8a_cout, c8b_sum, c8b_carry;
  sfc_abcd1_exact u_c8a (.a(pp[1][7]), .b(pp[2][6]), .c(pp[3][5]), .d(pp[4][4]),
                         .sum(c8a_sum), .carry(c8a_carry), .cout(c8a_cout));
  full_adder      u_c8b (.a(pp[5][3]), .b(pp[6][2]), .c(pp[7][1]),
                         .sum(c8b_sum), .carry(c8b_carry));

  // column 2^9 .. 2^12 (MSP)
  logic s1_9,  c1_9,  o1_9;
  logic s1_10, c1_10, o1_10;
  logic s1_11, c1_11;
  logic s1_12, c1_12;
  comp42_exact u_s1_9  (.x1(pp[2][7]), .x2(pp[3][6]), .x3(pp[4][5]), .x4(pp[5][4]),
                        .cin(pp[6][3]), .sum(s1_9),  .carry(c1_9),  .cout(o1_9));
  comp42_exact u_s1_10 (.x1(pp[3][7]), .x2(pp[4][6]), .x3(pp[5][5]), .x4(pp[6][4]),
                        .cin(pp[7][3]), .sum(s1_10), .carry(c1_10), .cout(o1_10));
  full_adder   u_s1_11 (.a(pp[4][7]), .b(pp[5][6]), .c(pp[6][5]), .sum(s1_11), .carry(c1_11));
  half_adder   u_s1_12 (.a(pp[5][7]), .b(pp[6][6]),               .sum(s1_12), .carry(c1_12));

  // ---------------------------------------------------------------- stage 2
  logic p7, h7_carry;
  half_adder u_s2_7 (.a(c7a_sum), .b(c7b_sum), .sum(p7), .carry(h7_carry));

  logic s2_8, c2_8;
  comp42_approx u_s2_8 (.x1(c8a_sum), .x2(c8b_sum), .x3(c7a_carry), .x4(c7b_carry),
                        .sum(s2_8), .carry(c2_8));

  logic s2_9,  c2_9,  o2_9;
  logic s2_10, c2_10, o2_10;
  logic s2_11, c2_11, o2_11;
  logic s2_12, c2_12, o2_12;
  logic s2_13, c2_13, o2_13;
  logic s2_14, c2_14;
  comp42_exact u_s2_9  (.x1(s1_9),     .x2(c8a_carry), .x3(c8a_cout), .x4(c8b_carry),
                        .cin(pp[7][2]), .sum(s2_9),  .carry(c2_9),  .cout(o2_9));
  comp42_exact u_s2_10 (.x1(s1_10),    .x2(c1_9),      .x3(o1_9),     .x4(1'b0),
                        .cin(o2_9),     .sum(s2_10), .carry(c2_10), .cout(o2_10));
  comp42_exact u_s2_11 (.x1(pp[7][4]), .x2(s1_11),     .x3(c1_10),    .x4(o1_10),
                        .cin(o2_10),    .sum(s2_11), .carry(c2_11), .cout(o2_11));
  comp42_exact u_s2_12 (.x1(pp[7][5]), .x2(s1_12),     .x3(c1_11),    .x4(1'b0),
                        .cin(o2_11),    .sum(s2_12), .carry(c2_12), .cout(o2_12));
  comp42_exact u_s2_13 (.x1(pp[6][7]), .x2(pp[7][6]),  .x3(c1_12),    .x4(1'b0),
                        .cin(o2_12),    .sum(s2_13), .carry(c2_13), .cout(o2_13));
  half_adder   u_s2_14 (.a(pp[7][7]), .b(o2_13), .sum(s2_14), .carry(c2_14));

  // ---------------------------------------------------------------- stage 3
  // Row A holds one bit per column 2^8..2^15 (the constant 1 at 2^15 is the
  // second Baugh-Wooley correction); row B holds the carries.
  logic [N-1:0] row_a, row_b, upper;
  assign row_a = {1'b1,  s2_14, s2_13, s2_12, s2_11, s2_10, s2_9, s2_8};
  assign row_b = {c2_14, c2_13, c2_12, c2_11, c2_10, c2_9,  c2_8, h7_carry};

  final_adder #(.W(N)) u_final (.a(row_a), .b(row_b), .s(upper));

  assign p = {upper, p7, 1'b1, 6'b0};
endmodule
