// tb_window_3x3: shifts random columns into the 3 x 3 window (with random
// idle cycles) and checks every element against the last three columns
// entered; also checks the reset value.
`timescale 1ns/1ps
module tb_window_3x3;
  import sfc_pkg::*;
  logic clk = 0, rst_n = 0, shift;
  operand_t [2:0] col_in;
  operand_t [2:0][2:0] win;
  operand_t [2:0] cols[$];
  int checks = 0, failures = 0;

  window_3x3 dut (.clk(clk), .rst_n(rst_n), .shift(shift), .col_in(col_in), .win(win));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    shift = 0; col_in = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    checks++;
    if (win != '0) failures++;
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      shift  = ($urandom_range(0, 2) != 0);
      col_in = {operand_t'($urandom), operand_t'($urandom), operand_t'($urandom)};
      @(posedge clk);
      if (shift) cols.push_back(col_in);
      #1;
      if (cols.size() >= 3) begin
        for (int r = 0; r < 3; r++)
          for (int c = 0; c < 3; c++) begin
            checks++;
            if (win[r][c] != cols[cols.size() - 3 + c][r]) begin
              failures++;
              if (failures < 5) $display("win[%0d][%0d]=%0d", r, c, win[r][c]);
            end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
