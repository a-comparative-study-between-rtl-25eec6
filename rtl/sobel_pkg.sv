// sobel_pkg: types and constants shared by the edge-detection core.
//
// The core works on 8-bit grey pixels. Colour pixels arrive one per 32-bit
// AXI-Stream word; the byte order of that word (R in [23:16], G in [15:8],
// B in [7:0], [31:24] unused) is this design's choice, matching a 24-bit
// BMP pixel stored little-endian with a pad byte. The AXI-Lite register
// map below is also this design's own: the only parameters of the image
// that the core needs are its width and height.
package sobel_pkg;

  localparam int unsigned PIX_W  = 8;   // grey pixel width
  localparam int unsigned DIM_W  = 16;  // width of the image-size registers
  localparam int unsigned AXIS_W = 32;  // AXI-Stream word width on both sides

  typedef logic [PIX_W-1:0] pixel_t;

  typedef struct packed {
    logic [7:0] pad;
    logic [7:0] r;
    logic [7:0] g;
    logic [7:0] b;
  } rgb_word_t;

  // AXI-Lite register byte addresses
  localparam logic [3:0] REG_CTRL   = 4'h0;  // bit0 write 1: restart the frame position
  localparam logic [3:0] REG_WIDTH  = 4'h4;  // image width in pixels
  localparam logic [3:0] REG_HEIGHT = 4'h8;  // image height in pixels
  localparam logic [3:0] REG_STATUS = 4'hC;  // read only: number of frames completed

endpackage
