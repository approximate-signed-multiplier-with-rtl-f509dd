// tb_frame_store: writes random words to random addresses of a small frame
// store (5 x 4), reads them back with one cycle of latency and compares with
// a shadow copy, including a read and a write of the same address together.
`timescale 1ns/1ps
module tb_frame_store;
  localparam int W = 5, H = 4, AW = $clog2(W * H);
  logic clk = 0, we;
  logic [AW-1:0] waddr, raddr;
  logic [19:0] wdata, rdata;
  logic [19:0] shadow [W * H];
  logic [W*H-1:0] written;
  int checks = 0, failures = 0;

  frame_store #(.IMG_W(W), .IMG_H(H), .DATA_W(20)) dut (
    .clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .raddr(raddr), .rdata(rdata));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [19:0] expv;
    logic        chk;
    written = '0;
    we = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int k = 0; k < 1000; k++) begin
      @(negedge clk);
      we    = (k < W * H) || ($urandom_range(0, 1) != 0);
      waddr = AW'((k < W * H) ? k : $urandom_range(0, W * H - 1));
      wdata = 20'($urandom);
      raddr = AW'($urandom_range(0, W * H - 1));
      chk   = written[raddr];
      expv  = shadow[raddr];                   // old value: read before write
      @(posedge clk);
      if (we) begin
        shadow[waddr]  = wdata;
        written[waddr] = 1'b1;
      end
      #1;
      if (chk) begin
        checks++;
        if (rdata != expv) begin
          failures++;
          if (failures < 5) $display("rdata=%0h expected %0h", rdata, expv);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
