// tb_line_buffer: the row buffer must return, while enabled, the word written
// DEPTH enabled cycles earlier, and hold still while en is low. A small depth
// (5) is used; random data and random enable gaps.
`timescale 1ns/1ps
module tb_line_buffer;
  localparam int DEPTH = 5;
  logic clk = 0, rst_n = 0, en;
  logic [7:0] din, dout;
  logic [7:0] hist[$];
  int checks = 0, failures = 0;

  line_buffer #(.DEPTH(DEPTH), .WIDTH(8)) dut (.clk(clk), .rst_n(rst_n), .en(en), .din(din), .dout(dout));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; din = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int k = 0; k < 400; k++) begin
      @(negedge clk);
      en  = ($urandom_range(0, 3) != 0);
      din = 8'($urandom);
      #1;
      if (en && hist.size() >= DEPTH) begin
        checks++;
        if (dout != hist[hist.size() - DEPTH]) begin
          failures++;
          if (failures < 5) $display("dout=%0d expected %0d", dout, hist[hist.size() - DEPTH]);
        end
      end
      @(posedge clk);
      if (en) hist.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
