// tb_edge_detect_full: one complete frame through the edge detector at its
// default size (640 x 480), with no parameter overrides.
//
// The test image is generated here: 7-bit grey levels forming a horizontal
// ramp, a bright rectangle, a dark disc and a light pseudo-random texture,
// so that the filter sees flat areas, soft gradients and sharp edges. pix_valid
// has occasional gaps. Every output is compared with the zero-padded
// Laplacian from the reference multiplier model, the frame's cycle count is
// bounded, and at the end the edge map is compared with the one an exact
// multiplier would give: both are clipped to 0..255 and the PSNR between them
// is printed (for information; it depends on the image).
`timescale 1ns/1ps
module tb_edge_detect_full;
  import sfc_pkg::*;
  import sfc_ref_pkg::*;

  localparam int W = 640;
  localparam int H = 480;

  logic clk = 0, rst_n = 0;
  logic pix_valid, pix_ready, out_valid, frame_done;
  operand_t pix_data;
  logic [$clog2(H+1)-1:0] out_row;
  logic [$clog2(W+1)-1:0] out_col;
  acc_t out_data, rd_data;
  logic [$clog2(W*H)-1:0] rd_addr;

  int checks = 0, failures = 0;
  int img[];
  int in_idx = 0, out_idx = 0;
  longint cyc = 0;
  real sq_err = 0.0;

  edge_detect_top dut (
    .clk(clk), .rst_n(rst_n), .pix_valid(pix_valid), .pix_ready(pix_ready),
    .pix_data(pix_data), .out_valid(out_valid), .out_row(out_row), .out_col(out_col),
    .out_data(out_data), .frame_done(frame_done), .rd_addr(rd_addr), .rd_data(rd_data));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int clip8(int v);
    return (v < 0) ? 0 : (v > 255) ? 255 : v;
  endfunction

  // exact-multiplier Laplacian for the PSNR comparison
  function automatic int exact_conv(int r, int c);
    int acc = 0, px;
    for (int dr = -1; dr <= 1; dr++)
      for (int dc = -1; dc <= 1; dc++) begin
        px = (r + dr < 0 || r + dr >= H || c + dc < 0 || c + dc >= W) ? 0 : img[(r + dr) * W + c + dc];
        acc += px * lap_coeff((dr + 1) * 3 + dc + 1);
      end
    return acc;
  endfunction

  always @(negedge clk) begin
    if (rst_n) begin
      pix_valid <= (in_idx < W * H) && ($urandom_range(0, 7) != 0);
      pix_data  <= operand_t'((in_idx < W * H) ? img[in_idx] : 0);
    end
  end

  always @(posedge clk) begin
    if (rst_n) begin
      cyc++;
      if (pix_valid && pix_ready) in_idx++;
      if (out_valid) begin
        int r, c, e, d;
        r = out_idx / W;
        c = out_idx % W;
        e = ref_conv(img, W, H, r, c);
        checks++;
        if (int'(out_row) != r || int'(out_col) != c || int'(out_data) != e) begin
          failures++;
          if (failures < 10) $display("got (%0d,%0d)=%0d expected (%0d,%0d)=%0d",
                                      out_row, out_col, out_data, r, c, e);
        end
        d = clip8(int'(out_data)) - clip8(exact_conv(r, c));
        sq_err += real'(d * d);
        out_idx++;
      end
    end
  end

  initial begin
    int dx, dy, v;
    img = new[W * H];
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        v  = (c * 64) / W + 16;                                      // ramp
        if (r >= 100 && r < 220 && c >= 80 && c < 300) v = 120;        // rectangle
        dx = c - 450; dy = r - 300;
        if (dx * dx + dy * dy < 90 * 90) v = 8;                        // disc
        v += int'($urandom_range(0, 6)) - 3;                           // texture
        img[r * W + c] = (v < 0) ? 0 : (v > 127) ? 127 : v;
      end
    pix_valid = 0; pix_data = '0; rd_addr = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    @(posedge clk iff frame_done);
    checks++;
    if (out_idx != W * H) begin
      failures++;
      $display("%0d outputs for %0d pixels", out_idx, W * H);
    end
    checks++;
    if (cyc < longint'((H + 1) * (W + 1) + 10 * H * W) || cyc > 4_000_000) begin
      failures++;
      $display("frame took %0d cycles", cyc);
    end
    $display("frame of %0d x %0d in %0d cycles; PSNR against exact-multiplier edge map %0.2f dB",
             W, H, cyc, (sq_err == 0.0) ? 999.0 : 10.0 * $log10(255.0 * 255.0 / (sq_err / real'(W * H))));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
