// tb_comp42_approx: exhaustive test of the approximate two-output 4:2
// compressor: sum + 2*carry must equal min(ones, 3) for all 16 patterns.
`timescale 1ns/1ps
module tb_comp42_approx;
  logic x1, x2, x3, x4, sum, carry;
  int checks = 0, failures = 0;

  comp42_approx dut (.x1(x1), .x2(x2), .x3(x3), .x4(x4), .sum(sum), .carry(carry));

  initial begin : watchdog
    #1us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    for (int k = 0; k < 16; k++) begin
      {x1, x2, x3, x4} = 4'(k);
      #1;
      n = $countones(k[3:0]);
      if (n > 3) n = 3;
      checks++;
      if (int'(sum) + 2 * int'(carry) != n) begin
        failures++;
        $display("x=%04b sum=%b carry=%b", k[3:0], sum, carry);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
