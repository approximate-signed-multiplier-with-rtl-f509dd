// tb_sfc_abcd1_exact: exhaustive test of the exact A+B+C+D+1 compressor.
// Each of the 16 input patterns must give sum + 2*carry + 2*cout =
// A+B+C+D+1, sum must be its parity and carry must equal B|C (as in the
// published table).
`timescale 1ns/1ps
module tb_sfc_abcd1_exact;
  logic a, b, c, d, sum, carry, cout;
  int checks = 0, failures = 0;

  sfc_abcd1_exact dut (.a(a), .b(b), .c(c), .d(d), .sum(sum), .carry(carry), .cout(cout));

  initial begin : watchdog
    #1us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v;
    for (int k = 0; k < 16; k++) begin
      {a, b, c, d} = 4'(k);
      #1;
      v = int'(a) + int'(b) + int'(c) + int'(d) + 1;
      checks++;
      if (int'(sum) + 2 * int'(carry) + 2 * int'(cout) != v) begin
        failures++;
        $display("ABCD=%04b value mismatch", k[3:0]);
      end
      checks++;
      if (sum != v[0] || carry != (b | c)) begin
        failures++;
        $display("ABCD=%04b bit split mismatch", k[3:0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
