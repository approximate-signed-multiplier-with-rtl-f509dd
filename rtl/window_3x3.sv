// window_3x3: the "input matrix" of the edge detector, a 3 x 3 register array
// holding the patch around the pixel being filtered.
//
// Each shift moves the window one column to the right: the columns move left
// and col_in (one sample from each of three consecutive rows, row 0 the
// oldest) enters as the new column 2. win[r][c] is row r, column c of the
// patch; win[1][1] is its centre. The registers reset to zero. The source
// only names this 3 x 3 input matrix; the shift-register form is this
// design's choice.
module window_3x3
  import sfc_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  shift,
  input  operand_t [2:0]        col_in,
  output operand_t [2:0][2:0]   win
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win <= '0;
    end else if (shift) begin
      for (int r = 0; r < 3; r++) begin
        win[r][0] <= win[r][1];
        win[r][1] <= win[r][2];
        win[r][2] <= col_in[r];
      end
    end
  end
endmodule
