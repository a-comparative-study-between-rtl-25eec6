// sliding_window: the 3x3 neighbourhood the Sobel masks are applied to.
//
// Three shift registers of three pixel registers each (nine registers), as
// the paper describes. On each edge with shift high, every row moves one
// place towards the older end and takes a new pixel at the newest end: the
// top row from line buffer 1 (two rows above the new pixel), the middle row
// from line buffer 2 (one row above) and the bottom row from the new pixel.
//
// win[r][c]: r = 0 top .. 2 bottom; c = 0 oldest (leftmost in the image) ..
// 2 newest (rightmost). The registers are cleared by reset; their contents
// before three shifts of a row are not meaningful and the filter masks them.
module sliding_window
  import sobel_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   shift,
  input  pixel_t top_in,
  input  pixel_t mid_in,
  input  pixel_t bot_in,
  output pixel_t win [3][3]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++)
          win[r][c] <= '0;
    end else if (shift) begin
      for (int r = 0; r < 3; r++) begin
        win[r][0] <= win[r][1];
        win[r][1] <= win[r][2];
      end
      win[0][2] <= top_in;
      win[1][2] <= mid_in;
      win[2][2] <= bot_in;
    end
  end

endmodule
