// line_buffer: row buffer of the edge detector. A circular memory of DEPTH
// words that returns, on dout, the word written DEPTH enabled cycles earlier,
// i.e. the sample one image row above the one now entering.
//
// The source names a row buffer feeding 3 x 3 patches but gives no insides;
// a single-port-per-side circular memory with one pointer is this design's
// choice. dout is read combinationally from the current pointer and is valid
// while en is high; on a clock edge with en high, din is written at the
// pointer and the pointer advances (wrapping at DEPTH). The memory is not
// reset: the window logic masks the rows above the image, so the contents
// read before the first row has gone round do not matter. DEPTH defaults to
// one padded row of the default 640-pixel image (640 + 1 pad column).
module line_buffer #(
  parameter int unsigned DEPTH = 641,
  parameter int unsigned WIDTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PTR_W-1:0] ptr;

  assign dout = mem[ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      ptr <= '0;
    else if (en)
      ptr <= (ptr == PTR_W'(DEPTH - 1)) ? '0 : ptr + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (en) mem[ptr] <= din;
  end
endmodule
