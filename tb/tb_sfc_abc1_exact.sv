// tb_sfc_abc1_exact: exhaustive test of the exact A+B+C+1 compressor.
// For all eight inputs, sum + 2*carry + 2*cout must equal A+B+C+1, and the
// split chosen for this design (carry = B|C) is checked too.
`timescale 1ns/1ps
module tb_sfc_abc1_exact;
  logic a, b, c, sum, carry, cout;
  int checks = 0, failures = 0;

  sfc_abc1_exact dut (.a(a), .b(b), .c(c), .sum(sum), .carry(carry), .cout(cout));

  initial begin : watchdog
    #1us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 8; k++) begin
      {a, b, c} = 3'(k);
      #1;
      checks++;
      if (int'(sum) + 2 * int'(carry) + 2 * int'(cout) != int'(a) + int'(b) + int'(c) + 1) begin
        failures++;
        $display("value mismatch for ABC=%03b", k[2:0]);
      end
      checks++;
      if (carry != (b | c)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
