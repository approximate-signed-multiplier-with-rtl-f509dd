// tb_approx_sfc_mult: exhaustive test of the 8 x 8 approximate multiplier.
// All 65,536 operand pairs are applied; each product is compared with the
// column-sum reference model, and the fixed low bits (5..0 zero, 6 one) are
// checked. The error statistics against the exact product (error rate,
// NMED, MRED, mean error) are printed, and the mean error is checked against
// a total worked out separately.
`timescale 1ns/1ps
module tb_approx_sfc_mult;
  import sfc_pkg::*;
  import sfc_ref_pkg::*;

  operand_t a, b;
  product_t p;
  int checks = 0, failures = 0;

  approx_sfc_mult dut (.a(a), .b(b), .p(p));

  initial begin : watchdog
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint n_err = 0, sum_ed = 0, sum_err = 0;
    real    sum_red = 0.0;
    int     exp_v, ex;
    for (int ia = -128; ia < 128; ia++) begin
      for (int ib = -128; ib < 128; ib++) begin
        a = operand_t'(ia);
        b = operand_t'(ib);
        #1;
        exp_v = ref_mult(ia, ib);
        ex    = ia * ib;
        checks++;
        if (int'(p) != exp_v || p[5:0] != 6'd0 || p[6] != 1'b1) begin
          failures++;
          if (failures < 10) $display("MISMATCH a=%0d b=%0d p=%0d expected %0d", ia, ib, p, exp_v);
        end
        if (int'(p) != ex) n_err++;
        sum_ed  += (int'(p) > ex) ? int'(p) - ex : ex - int'(p);
        sum_err += int'(p) - ex;
        if (ex != 0) sum_red += ((int'(p) > ex) ? real'(int'(p) - ex) : real'(ex - int'(p))) / ((ex > 0) ? real'(ex) : -real'(ex));
      end
    end
    $display("error rate %0.2f %%, NMED %0.3f %%, MRED %0.2f %%, mean error %0.4f",
             100.0 * real'(n_err) / 65536.0, 100.0 * real'(sum_ed) / 65536.0 / 16384.0,
             100.0 * sum_red / 65536.0, real'(sum_err) / 65536.0);
    // Summed over all pairs the approximate products exceed the exact ones
    // by 1,044,480 (mean +15.9375), a figure from a separate integer model.
    checks++;
    if (sum_err != 64'd1044480) begin
      failures++;
      $display("mean error sum %0d, expected 1044480", sum_err);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
