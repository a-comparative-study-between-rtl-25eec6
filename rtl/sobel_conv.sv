// sobel_conv: Sobel gradient magnitude of one 3x3 window (combinational).
//
// Applies the two masks the paper gives,
//   Mh = [-1 -2 -1; 0 0 0; 1 2 1]     Mv = [-1 0 1; -2 0 2; -1 0 1],
// and forms the magnitude with the paper's approximation |Gh| + |Gv|.
// The masks are fixed, so the products are shifts and adds (no multipliers,
// matching the paper's zero DSP count). The sum can reach 2040; clamping it
// to 255 so it fits the 8-bit output pixel is this design's choice, as the
// paper does not say how the 8-bit result is formed.
//
// win[r][c] as in sliding_window: r = 0 top row, c = 0 left column.
// Timing: purely combinational; the filter registers its output.
module sobel_conv
  import sobel_pkg::*;
(
  input  pixel_t win [3][3],
  output pixel_t mag
);

  logic signed [11:0] gh, gv;
  logic        [11:0] agh, agv;
  logic        [12:0] sum;

  always_comb begin
    gh = (12'(win[2][0]) + (12'(win[2][1]) << 1) + 12'(win[2][2]))
       - (12'(win[0][0]) + (12'(win[0][1]) << 1) + 12'(win[0][2]));
    gv = (12'(win[0][2]) + (12'(win[1][2]) << 1) + 12'(win[2][2]))
       - (12'(win[0][0]) + (12'(win[1][0]) << 1) + 12'(win[2][0]));
    agh = gh[11] ? 12'(-gh) : 12'(gh);
    agv = gv[11] ? 12'(-gv) : 12'(gv);
    sum = 13'(agh) + 13'(agv);
    mag = (sum > 13'd255) ? 8'd255 : sum[7:0];
  end

endmodule
