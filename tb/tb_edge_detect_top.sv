// tb_edge_detect_top: end-to-end test of the edge detector on a small image
// (9 x 6), two frames back to back.
//
// Frame 1 streams random full-range signed pixels with pix_valid always
// high and checks the frame's cycle count, (H+1)(W+1) + 10*H*W. Frame 2
// streams 7-bit grey levels with random gaps in pix_valid. Every out_valid
// strobe is compared (row, column, value) with a zero-padded Laplacian
// computed from the reference multiplier model; after frame 2 the whole frame
// store is read back and compared. The mechanisms of the design are counted
// and each must occur: outputs on each of the four padded borders, injected
// pad samples, back-pressure (pix_valid high, pix_ready low), source gaps
// (pix_ready high, pix_valid low) and frame_done.
`timescale 1ns/1ps
module tb_edge_detect_top;
  import sfc_pkg::*;
  import sfc_ref_pkg::*;

  localparam int W = 9;
  localparam int H = 6;
  localparam int ADDR_W = $clog2(W * H);

  logic clk = 0, rst_n = 0;
  logic pix_valid, pix_ready, out_valid, frame_done;
  operand_t pix_data;
  logic [$clog2(H+1)-1:0] out_row;
  logic [$clog2(W+1)-1:0] out_col;
  acc_t out_data, rd_data;
  logic [ADDR_W-1:0] rd_addr;

  int checks = 0, failures = 0;
  int img[];
  int in_idx, out_idx, frame, gaps_on;
  int n_top, n_bot, n_left, n_right, n_pad, n_bp, n_gap, n_done;
  longint cyc;

  edge_detect_top #(.IMG_W(W), .IMG_H(H)) dut (
    .clk(clk), .rst_n(rst_n), .pix_valid(pix_valid), .pix_ready(pix_ready),
    .pix_data(pix_data), .out_valid(out_valid), .out_row(out_row), .out_col(out_col),
    .out_data(out_data), .frame_done(frame_done), .rd_addr(rd_addr), .rd_data(rd_data));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // source: present pixel img[in_idx]; with gaps_on, drop valid at random
  always @(negedge clk) begin
    if (rst_n) begin
      pix_valid <= (in_idx < W * H) && (!gaps_on || ($urandom_range(0, 2) != 0));
      pix_data  <= operand_t'((in_idx < W * H) ? img[in_idx] : 0);
    end
  end

  always @(posedge clk) begin
    if (rst_n) begin
      cyc++;
      if (pix_valid && pix_ready) in_idx++;
      if (pix_valid && !pix_ready) n_bp++;
      if (!pix_valid && pix_ready) n_gap++;
      if (dut.shift && !dut.real_pos) n_pad++;
      if (frame_done) n_done++;
      if (out_valid) begin
        int r, c, e;
        r = out_idx / W;
        c = out_idx % W;
        e = ref_conv(img, W, H, r, c);
        checks++;
        if (int'(out_row) != r || int'(out_col) != c || int'(out_data) != e) begin
          failures++;
          if (failures < 10)
            $display("frame %0d: got (%0d,%0d)=%0d expected (%0d,%0d)=%0d",
                     frame, out_row, out_col, out_data, r, c, e);
        end
        if (r == 0) n_top++;
        if (r == H - 1) n_bot++;
        if (c == 0) n_left++;
        if (c == W - 1) n_right++;
        out_idx++;
      end
    end
  end

  task automatic run_frame(bit gaps, bit grey);
    longint start;
    for (int k = 0; k < W * H; k++)
      img[k] = grey ? $urandom_range(0, 127) : int'($urandom_range(0, 255)) - 128;
    in_idx  = 0;
    out_idx = 0;
    gaps_on = gaps;
    start   = cyc;
    @(posedge clk iff frame_done);
    checks++;
    if (out_idx != W * H) begin
      failures++;
      $display("frame %0d: %0d outputs", frame, out_idx);
    end
    if (!gaps) begin
      checks++;
      if (cyc - start != longint'((H + 1) * (W + 1) + 10 * H * W)) begin
        failures++;
        $display("frame took %0d cycles, expected %0d", cyc - start, (H + 1) * (W + 1) + 10 * H * W);
      end
    end
    frame++;
  endtask

  initial begin
    img = new[W * H];
    in_idx = 0; out_idx = 0; frame = 0; gaps_on = 0; cyc = 0;
    n_top = 0; n_bot = 0; n_left = 0; n_right = 0; n_pad = 0; n_bp = 0; n_gap = 0; n_done = 0;
    pix_valid = 0; pix_data = '0; rd_addr = '0;
    for (int k = 0; k < W * H; k++) img[k] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    run_frame(1'b0, 1'b0);
    run_frame(1'b1, 1'b1);
    // read the stored frame back
    for (int k = 0; k < W * H; k++) begin
      @(negedge clk) rd_addr = ADDR_W'(k);
      @(posedge clk); #1;
      checks++;
      if (int'(rd_data) != ref_conv(img, W, H, k / W, k % W)) begin
        failures++;
        $display("frame store[%0d]=%0d expected %0d", k, rd_data, ref_conv(img, W, H, k / W, k % W));
      end
    end
    $display("mechanisms: top=%0d bottom=%0d left=%0d right=%0d pad_samples=%0d backpressure=%0d source_gaps=%0d frame_done=%0d",
             n_top, n_bot, n_left, n_right, n_pad, n_bp, n_gap, n_done);
    checks++;
    if (n_top == 0 || n_bot == 0 || n_left == 0 || n_right == 0 || n_pad == 0 ||
        n_bp == 0 || n_gap == 0 || n_done != 2) begin
      failures++;
      $display("a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
