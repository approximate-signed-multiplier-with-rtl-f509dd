// tb_sfc_abcd1_approx: exhaustive test of the approximate A+B+C+D+1
// compressor. The error distance (exact minus approximate) of every pattern
// is compared with the ED column of the published table, the carry with
// A|B|C|D, and the mean error with A a NAND bit (P=3/4) and B, C, D AND
// bits (P=1/4) is recomputed: 37/256.
`timescale 1ns/1ps
module tb_sfc_abcd1_approx;
  logic a, b, c, d, sum, carry;
  int checks = 0, failures = 0;
  localparam int ED [16] = '{0,0,0,1, 0,0,0,1, 0,0,0,1, 0,1,1,2};

  sfc_abcd1_approx dut (.a(a), .b(b), .c(c), .d(d), .sum(sum), .carry(carry));

  initial begin : watchdog
    #1us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ed, me256 = 0, pr;
    for (int k = 0; k < 16; k++) begin
      {a, b, c, d} = 4'(k);
      #1;
      ed = int'(a) + int'(b) + int'(c) + int'(d) + 1 - (2 * int'(carry) + int'(sum));
      checks++;
      if (ed != ED[k] || carry != (a | b | c | d)) begin
        failures++;
        $display("ABCD=%04b carry=%b sum=%b ed=%0d", k[3:0], carry, sum, ed);
      end
      pr = (a ? 3 : 1) * (b ? 1 : 3) * (c ? 1 : 3) * (d ? 1 : 3);
      me256 += pr * ed;
    end
    checks++;
    if (me256 != 37) begin
      failures++;
      $display("mean error %0d/256", me256);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
