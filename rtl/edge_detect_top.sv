// edge_detect_top: streaming 3 x 3 Laplacian edge detector built around the
// approximate signed multiplier.
//
// Pixels of an IMG_W x IMG_H image arrive in raster order, one per accepted
// pix_valid/pix_ready handshake, as signed 8-bit samples (an 8-bit grey
// level must be brought into -128..127 first, e.g. 7-bit grey or grey-128).
// For every pixel the unit forms the zero-padded 3 x 3 patch, multiplies its
// nine samples by the kernel (8 at the centre, -1 around it) with the
// approximate multiplier, accumulates the products and emits the sum.
//
// How it works. The controller walks a padded raster of (IMG_H+1) rows by
// (IMG_W+1) columns. Positions inside the image consume an input pixel; the
// extra column and row inject zeros without a handshake. Every position
// shifts one column into the 3 x 3 window: the new sample and the samples one
// and two padded rows above it, taken from two row buffers of IMG_W+1 words.
// After the shift at position (y, x), the window is centred on pixel
// (y-1, x-1); if that is a real pixel, the MAC runs nine cycles over the
// window (taps outside the image are forced to zero, which is the zero
// padding) and the result is written to the frame store and put on out_*.
//
// Timing. A position without an output takes one cycle (plus any wait for
// pix_valid); one with an output takes 1 + 9 + 1 cycles, during which
// pix_ready is low. With pix_valid held high a frame takes
// (IMG_H+1)(IMG_W+1) + 10*IMG_H*IMG_W cycles. out_valid is a one-cycle
// strobe with out_row/out_col/out_data; frame_done pulses for one cycle after
// the last pixel's result. The stored frame is read through rd_addr/rd_data
// (row-major address, one cycle latency).
//
// The row buffer, input matrix, MAC with the fixed kernel, zero padding and
// output image follow the source's description of the framework; the
// padded-raster controller, handshake, timing, sample format and image size
// defaults are this design's choices.
module edge_detect_top
  import sfc_pkg::*;
#(
  parameter int unsigned IMG_W = 640,
  parameter int unsigned IMG_H = 480,
  localparam int unsigned COL_W  = $clog2(IMG_W + 1),
  localparam int unsigned ROW_W  = $clog2(IMG_H + 1),
  localparam int unsigned ADDR_W = $clog2(IMG_W * IMG_H)
) (
  input  logic              clk,
  input  logic              rst_n,
  // pixel stream in
  input  logic              pix_valid,
  output logic              pix_ready,
  input  operand_t          pix_data,
  // filtered pixel stream out
  output logic              out_valid,
  output logic [ROW_W-1:0]  out_row,
  output logic [COL_W-1:0]  out_col,
  output acc_t              out_data,
  output logic              frame_done,
  // convolved-image read port
  input  logic [ADDR_W-1:0] rd_addr,
  output acc_t              rd_data
);
  typedef enum logic [1:0] {S_FEED, S_MAC, S_WB} state_t;

  state_t           state;
  logic [COL_W-1:0] x;        // padded-raster column of the next sample, 0..IMG_W
  logic [ROW_W-1:0] y;        // padded-raster row,                       0..IMG_H
  tap_t             tap;

  // ------------------------------------------------------------ input side
  logic     real_pos, shift;
  operand_t sample;

  assign real_pos  = (y < ROW_W'(IMG_H)) && (x < COL_W'(IMG_W));
  assign pix_ready = (state == S_FEED) && real_pos;
  assign shift     = (state == S_FEED) && (real_pos ? pix_valid : 1'b1);
  assign sample    = real_pos ? pix_data : operand_t'(0);

  // ------------------------------------------------------- row buffers
  operand_t row1, row2;       // samples one and two padded rows above

  line_buffer #(.DEPTH(IMG_W + 1), .WIDTH(MULT_N)) u_lb1 (
    .clk(clk), .rst_n(rst_n), .en(shift), .din(sample), .dout(row1));
  line_buffer #(.DEPTH(IMG_W + 1), .WIDTH(MULT_N)) u_lb2 (
    .clk(clk), .rst_n(rst_n), .en(shift), .din(row1), .dout(row2));

  // ------------------------------------------------------- input matrix
  operand_t [2:0][2:0] win;

  window_3x3 u_win (.clk(clk), .rst_n(rst_n), .shift(shift),
                    .col_in({sample, row1, row2}), .win(win));

  // ------------------------------------------------- zero padding + MAC
  logic [ROW_W-1:0] cy;       // centre of the window: (y-1, x-1)
  logic [COL_W-1:0] cx;
  logic [1:0]       tr, tc;
  logic             pad;
  operand_t         tap_pixel;
  acc_t             acc;
  logic             acc_valid;

  assign cy = y - 1'b1;
  assign cx = x - 1'b1;
  assign tr = (tap < tap_t'(3)) ? 2'd0 : (tap < tap_t'(6)) ? 2'd1 : 2'd2;
  assign tc = 2'(tap - tap_t'(3) * tap_t'(tr));
  assign pad = (tr == 2'd0 && cy == '0) || (tr == 2'd2 && cy == ROW_W'(IMG_H - 1)) ||
               (tc == 2'd0 && cx == '0) || (tc == 2'd2 && cx == COL_W'(IMG_W - 1));
  assign tap_pixel = pad ? operand_t'(0) : win[tr][tc];

  laplacian_mac u_mac (.clk(clk), .rst_n(rst_n), .en(state == S_MAC), .tap(tap),
                       .pixel(tap_pixel), .acc(acc), .acc_valid(acc_valid));

  // ------------------------------------------------------- controller
  logic last_pos;
  assign last_pos = (x == COL_W'(IMG_W)) && (y == ROW_W'(IMG_H));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_FEED;
      x          <= '0;
      y          <= '0;
      tap        <= '0;
      frame_done <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      unique case (state)
        S_FEED: if (shift) begin
          if (y != '0 && x != '0) begin
            state <= S_MAC;
            tap   <= '0;
          end else begin
            // no pixel centred here (first padded row or column): move on
            x <= (x == COL_W'(IMG_W)) ? '0 : x + 1'b1;
            if (x == COL_W'(IMG_W)) y <= y + 1'b1;
          end
        end
        S_MAC: begin
          tap <= tap + 1'b1;
          if (tap == tap_t'(TAPS - 1)) state <= S_WB;
        end
        S_WB: begin
          state <= S_FEED;
          if (last_pos) begin
            x          <= '0;
            y          <= '0;
            frame_done <= 1'b1;
          end else if (x == COL_W'(IMG_W)) begin
            x <= '0;
            y <= y + 1'b1;
          end else begin
            x <= x + 1'b1;
          end
        end
        default: state <= S_FEED;
      endcase
    end
  end

  // ------------------------------------------------------- output side
  assign out_valid = (state == S_WB);
  assign out_row   = cy;
  assign out_col   = cx;
  assign out_data  = acc;

  frame_store #(.IMG_W(IMG_W), .IMG_H(IMG_H), .DATA_W(ACC_W)) u_frame (
    .clk(clk), .we(out_valid),
    .waddr(ADDR_W'(cy) * ADDR_W'(IMG_W) + ADDR_W'(cx)),
    .wdata(acc), .raddr(rd_addr), .rdata(rd_data));

  a_result_ready: assert property (@(posedge clk) disable iff (!rst_n)
                                   (state == S_WB) |-> acc_valid);
  a_no_accept_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                           (state != S_FEED) |-> !pix_ready);
endmodule
