// tb_sfc_abc1_approx: exhaustive test of the approximate A+B+C+1 compressor
// against the published truth table (Carry, Sum, S_aprx). It also recomputes
// the error probability and mean error (exact minus approximate) for A a NAND
// bit (P=3/4) and B, C AND bits (P=1/4): 9/64 and -3/64.
`timescale 1ns/1ps
module tb_sfc_abc1_approx;
  logic a, b, c, sum, carry;
  int checks = 0, failures = 0;
  // expected {carry,sum} for {A,B,C} = 0..7, from the table
  localparam logic [1:0] EXP [8] = '{2'b01, 2'b11, 2'b11, 2'b11, 2'b10, 2'b11, 2'b11, 2'b11};

  sfc_abc1_approx dut (.a(a), .b(b), .c(c), .sum(sum), .carry(carry));

  initial begin : watchdog
    #1us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pe64 = 0, me64 = 0, pr, err;
    for (int k = 0; k < 8; k++) begin
      {a, b, c} = 3'(k);
      #1;
      checks++;
      if ({carry, sum} != EXP[k]) begin
        failures++;
        $display("ABC=%03b got carry=%b sum=%b", k[2:0], carry, sum);
      end
      pr  = (a ? 3 : 1) * (b ? 1 : 3) * (c ? 1 : 3);   // in 1/64
      err = (int'(a) + int'(b) + int'(c) + 1) - (2 * int'(carry) + int'(sum));
      if (err != 0) pe64 += pr;
      me64 += pr * err;
    end
    checks++;
    if (pe64 != 9 || me64 != -3) begin
      failures++;
      $display("P_E=%0d/64 mean=%0d/64", pe64, me64);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
