// tb_laplacian_mac: feeds random 3 x 3 patches, one tap per cycle with
// random idle cycles between taps, and checks that acc_valid rises exactly
// one cycle after tap 8 with acc equal to the sum of the nine reference
// approximate products pixel x kernel(tap).
`timescale 1ns/1ps
module tb_laplacian_mac;
  import sfc_pkg::*;
  import sfc_ref_pkg::*;
  logic clk = 0, rst_n = 0, en, acc_valid;
  tap_t tap;
  operand_t pixel;
  acc_t acc;
  int checks = 0, failures = 0;

  laplacian_mac dut (.clk(clk), .rst_n(rst_n), .en(en), .tap(tap), .pixel(pixel),
                     .acc(acc), .acc_valid(acc_valid));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expv, px;
    en = 0; tap = '0; pixel = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      expv = 0;
      for (int t = 0; t < 9; t++) begin
        while ($urandom_range(0, 3) == 0) begin
          @(negedge clk) en = 0;
        end
        @(negedge clk);
        px    = (n % 2) ? int'($urandom_range(0, 127)) : int'($urandom_range(0, 255)) - 128;
        en    = 1;
        tap   = tap_t'(t);
        pixel = operand_t'(px);
        expv += ref_mult(px, lap_coeff(t));
        @(posedge clk); #1;
        checks++;
        if (acc_valid != (t == 8)) begin
          failures++;
          $display("acc_valid=%b after tap %0d", acc_valid, t);
        end
      end
      checks++;
      if (int'(acc) != expv) begin
        failures++;
        if (failures < 5) $display("acc=%0d expected %0d", acc, expv);
      end
      @(negedge clk) en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
