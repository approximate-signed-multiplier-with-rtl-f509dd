// tb_bw_pp_gen: exhaustive test of the Baugh-Wooley partial-product generator.
// For all operand pairs the bits must be AND / NAND as defined, and adding
// every bit at its weight plus the two constant ones (2^8 and 2^15) must give
// the exact 16-bit two's-complement product.
`timescale 1ns/1ps
module tb_bw_pp_gen;
  logic [7:0] a, b;
  logic [7:0][7:0] pp;
  int checks = 0, failures = 0;

  bw_pp_gen dut (.a(a), .b(b), .pp(pp));

  initial begin : watchdog
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sum, ex;
    for (int ia = -128; ia < 128; ia++)
      for (int ib = -128; ib < 128; ib++) begin
        a = 8'(ia);
        b = 8'(ib);
        #1;
        sum = (1 << 8) + (1 << 15);
        for (int i = 0; i < 8; i++)
          for (int j = 0; j < 8; j++) sum += int'(pp[i][j]) << (i + j);
        sum &= 16'hFFFF;
        if (sum >= 32768) sum -= 65536;
        ex = ia * ib;
        checks++;
        if (sum != ex || pp[7][0] != ~(a[7] & b[0]) || pp[1][2] != (a[1] & b[2])) begin
          failures++;
          if (failures < 5) $display("a=%0d b=%0d matrix sums to %0d", ia, ib, sum);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
