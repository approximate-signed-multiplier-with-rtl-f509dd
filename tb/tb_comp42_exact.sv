// tb_comp42_exact: exhaustive test of the exact 4:2 compressor: all 32 input
// patterns, sum + 2*(carry + cout) must equal the number of ones, and cout
// must not change when only cin changes.
`timescale 1ns/1ps
module tb_comp42_exact;
  logic x1, x2, x3, x4, cin, sum, carry, cout, cout0;
  int checks = 0, failures = 0;

  comp42_exact dut (.x1(x1), .x2(x2), .x3(x3), .x4(x4), .cin(cin),
                    .sum(sum), .carry(carry), .cout(cout));

  initial begin : watchdog
    #1us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 16; k++) begin
      for (int ci = 0; ci < 2; ci++) begin
        {x1, x2, x3, x4} = 4'(k);
        cin = ci[0];
        #1;
        if (ci == 0) cout0 = cout;
        checks++;
        if (int'(sum) + 2 * (int'(carry) + int'(cout)) != $countones({x1, x2, x3, x4, cin})
            || (ci == 1 && cout != cout0)) begin
          failures++;
          $display("x=%04b cin=%0d sum=%b carry=%b cout=%b", k[3:0], ci, sum, carry, cout);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
