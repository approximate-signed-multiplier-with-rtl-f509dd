// frame_store: memory for the convolved (edge) image, one DATA_W-bit word per
// pixel, row-major address row*IMG_W + col.
//
// The source shows the filter results collected into an output matrix and a
// row buffer that form the convolved image; this design keeps the whole
// output frame in one simple dual-port memory: a write port used by the
// filter and a read port with one cycle of latency (rdata is the word at the
// raddr of the previous clock edge) for whoever consumes the image.
module frame_store #(
  parameter int unsigned IMG_W  = 640,
  parameter int unsigned IMG_H  = 480,
  parameter int unsigned DATA_W = 20,
  localparam int unsigned DEPTH  = IMG_W * IMG_H,
  localparam int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic [ADDR_W-1:0] raddr,
  output logic [DATA_W-1:0] rdata
);
  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
