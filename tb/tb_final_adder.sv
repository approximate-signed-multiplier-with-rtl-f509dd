// tb_final_adder: exhaustive test of the 8-bit final adder (default width):
// every pair of rows must give (a + b) mod 256.
`timescale 1ns/1ps
module tb_final_adder;
  logic [7:0] a, b, s;
  int checks = 0, failures = 0;

  final_adder dut (.a(a), .b(b), .s(s));

  initial begin : watchdog
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++)
      for (int j = 0; j < 256; j++) begin
        a = 8'(i);
        b = 8'(j);
        #1;
        checks++;
        if (s != 8'(i + j)) begin
          failures++;
          if (failures < 5) $display("%0d + %0d gave %0d", i, j, s);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
