// sobel_core: the edge-detection processing core that sits between the DMA
// engine's two AXI-Stream channels, configured by the processor over
// AXI-Lite.
//
// Data path, as in the paper: colour pixels from the DMA read channel go
// through rgb2gray (mean of R, G, B), sobel_filter (two line buffers, 3x3
// window, |Gh| + |Gv|) and u8tou32 (four 8-bit results per 32-bit word),
// and the words go back to the DMA write channel. axil_regs holds the image
// size and counts finished frames. The DMA engine, DDR controller and ARM
// processor that complete the system are outside this module; their
// channels are its ports.
//
// Interface: s_axis_* carries one colour pixel per 32-bit word (layout in
// sobel_pkg), m_axis_* four grey edge pixels per 32-bit word, first pixel in
// bits [7:0]; m_axis_tlast marks the last word of a frame. s_axil_* is a
// 4-bit-address AXI4-Lite slave (map in axil_regs).
//
// Timing: one pixel per clock in steady state. From the accepting edge of a
// pixel to the edge on which its grey value is offered to the filter is one
// cycle; the filter adds three more to offer its result and u8tou32 one
// more to offer the word, so the word holding pixels k..k+3 is offered
// right after the edge that is 4 cycles after pixel k+3 was accepted.
// Back-pressure on m_axis stalls the whole chain.
module sobel_core
  import sobel_pkg::*;
#(
  parameter int unsigned MAX_WIDTH = 2048
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI-Stream from the DMA read channel (colour pixels)
  input  logic [AXIS_W-1:0] s_axis_tdata,
  input  logic              s_axis_tvalid,
  input  logic              s_axis_tlast,
  output logic              s_axis_tready,
  // AXI-Stream to the DMA write channel (packed edge pixels)
  output logic [AXIS_W-1:0] m_axis_tdata,
  output logic              m_axis_tvalid,
  output logic              m_axis_tlast,
  input  logic              m_axis_tready,
  // AXI4-Lite control slave
  input  logic [3:0]        s_axil_awaddr,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [31:0]       s_axil_wdata,
  input  logic [3:0]        s_axil_wstrb,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  output logic [1:0]        s_axil_bresp,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  input  logic [3:0]        s_axil_araddr,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready
);

  logic [DIM_W-1:0] img_width, img_height;
  logic             restart;

  pixel_t gray_data;
  logic   gray_valid, gray_last, gray_ready;
  pixel_t edge_data;
  logic   edge_valid, edge_last, edge_ready;

  axil_regs u_regs (
    .clk        (clk),
    .rst_n      (rst_n),
    .awaddr     (s_axil_awaddr),
    .awvalid    (s_axil_awvalid),
    .awready    (s_axil_awready),
    .wdata      (s_axil_wdata),
    .wstrb      (s_axil_wstrb),
    .wvalid     (s_axil_wvalid),
    .wready     (s_axil_wready),
    .bresp      (s_axil_bresp),
    .bvalid     (s_axil_bvalid),
    .bready     (s_axil_bready),
    .araddr     (s_axil_araddr),
    .arvalid    (s_axil_arvalid),
    .arready    (s_axil_arready),
    .rdata      (s_axil_rdata),
    .rresp      (s_axil_rresp),
    .rvalid     (s_axil_rvalid),
    .rready     (s_axil_rready),
    .img_width  (img_width),
    .img_height (img_height),
    .restart    (restart),
    .frame_done (m_axis_tvalid && m_axis_tready && m_axis_tlast)
  );

  rgb2gray u_rgb2gray (
    .clk     (clk),
    .rst_n   (rst_n),
    .s_data  (s_axis_tdata),
    .s_valid (s_axis_tvalid),
    .s_last  (s_axis_tlast),
    .s_ready (s_axis_tready),
    .m_data  (gray_data),
    .m_valid (gray_valid),
    .m_last  (gray_last),
    .m_ready (gray_ready)
  );

  sobel_filter #(.MAX_WIDTH(MAX_WIDTH)) u_sobel (
    .clk        (clk),
    .rst_n      (rst_n),
    .img_width  (img_width),
    .img_height (img_height),
    .restart    (restart),
    .s_data     (gray_data),
    .s_valid    (gray_valid),
    .s_last     (gray_last),
    .s_ready    (gray_ready),
    .m_data     (edge_data),
    .m_valid    (edge_valid),
    .m_last     (edge_last),
    .m_ready    (edge_ready)
  );

  u8tou32 u_pack (
    .clk     (clk),
    .rst_n   (rst_n),
    .s_data  (edge_data),
    .s_valid (edge_valid),
    .s_last  (edge_last),
    .s_ready (edge_ready),
    .m_data  (m_axis_tdata),
    .m_valid (m_axis_tvalid),
    .m_last  (m_axis_tlast),
    .m_ready (m_axis_tready)
  );

endmodule
