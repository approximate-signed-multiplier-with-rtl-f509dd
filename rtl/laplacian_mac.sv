// laplacian_mac: multiply-accumulate unit that applies the fixed 3 x 3
// Laplacian kernel (8 at the centre, -1 elsewhere) with the approximate
// signed multiplier.
//
// One tap per enabled cycle: the pixel is multiplied by the kernel
// coefficient of tap (0..8, row-major) in approx_sfc_mult, and the product is
// added to the accumulator; tap 0 starts a new sum instead of adding. The
// cycle after tap 8 has been accepted, acc_valid is high for one cycle and
// acc holds the nine-product sum. One shared multiplier and an adder that
// feeds back into the sum follow the source's MAC picture; the pixel is the
// multiplier's first operand (A) and the coefficient the second (B), and the
// 20-bit accumulator width, which cannot overflow, is this design's choice.
module laplacian_mac
  import sfc_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     en,
  input  tap_t     tap,
  input  operand_t pixel,
  output acc_t     acc,
  output logic     acc_valid
);
  operand_t coeff;
  product_t prod;

  assign coeff = laplacian_coeff(tap);

  approx_sfc_mult u_mult (.a(pixel), .b(coeff), .p(prod));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      acc_valid <= 1'b0;
    end else begin
      acc_valid <= en && (tap == tap_t'(TAPS - 1));
      if (en)
        acc <= ((tap == '0) ? acc_t'(0) : acc) + acc_t'(prod);
    end
  end

  a_tap_range: assert property (@(posedge clk) disable iff (!rst_n) en |-> tap < tap_t'(TAPS));
endmodule
