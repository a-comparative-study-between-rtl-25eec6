// axil_regs: AXI4-Lite control registers of the edge-detection core.
//
// The processor sets the image size and restarts the frame position through
// this slave; the paper says the core is configured by the processor over
// AXI-Lite but gives no register map, so the map is this design's own
// (addresses in sobel_pkg):
//   0x0 CTRL   W  bit0 = 1 pulses `restart` for one cycle (reads as 0)
//   0x4 WIDTH  RW image width in pixels  (reset value RESET_WIDTH)
//   0x8 HEIGHT RW image height in pixels (reset value RESET_HEIGHT)
//   0xC STATUS R  number of frames sent out since reset (wraps at 2^32)
// Writes to other addresses or to STATUS are accepted and ignored; all
// responses are OKAY. Byte strobes are honoured on WIDTH and HEIGHT.
//
// Handshake: a write is taken on the edge where AWVALID and WVALID are both
// high and no response is pending (AWREADY and WREADY are high together for
// that cycle); BVALID follows on the next cycle and holds until BREADY. A
// read is taken when ARVALID is high and no read data is pending; RVALID
// follows on the next cycle and holds until RREADY.
module axil_regs
  import sobel_pkg::*;
#(
  parameter logic [DIM_W-1:0] RESET_WIDTH  = DIM_W'(512),
  parameter logic [DIM_W-1:0] RESET_HEIGHT = DIM_W'(512)
) (
  input  logic             clk,
  input  logic             rst_n,
  // write address / data / response
  input  logic [3:0]       awaddr,
  input  logic             awvalid,
  output logic             awready,
  input  logic [31:0]      wdata,
  input  logic [3:0]       wstrb,
  input  logic             wvalid,
  output logic             wready,
  output logic [1:0]       bresp,
  output logic             bvalid,
  input  logic             bready,
  // read address / data
  input  logic [3:0]       araddr,
  input  logic             arvalid,
  output logic             arready,
  output logic [31:0]      rdata,
  output logic [1:0]       rresp,
  output logic             rvalid,
  input  logic             rready,
  // to and from the core
  output logic [DIM_W-1:0] img_width,
  output logic [DIM_W-1:0] img_height,
  output logic             restart,
  input  logic             frame_done
);

  logic        wr, rd;
  logic [31:0] frames;

  assign wr      = awvalid && wvalid && !bvalid;
  assign awready = wr;
  assign wready  = wr;
  assign rd      = arvalid && !rvalid;
  assign arready = rd;
  assign bresp   = 2'b00;
  assign rresp   = 2'b00;

  function automatic logic [DIM_W-1:0] merge(logic [DIM_W-1:0] old,
                                             logic [31:0] data, logic [3:0] strb);
    logic [31:0] v;
    v = 32'(old);
    for (int i = 0; i < 4; i++)
      if (strb[i]) v[i*8 +: 8] = data[i*8 +: 8];
    return v[DIM_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      img_width  <= RESET_WIDTH;
      img_height <= RESET_HEIGHT;
      restart    <= 1'b0;
      bvalid     <= 1'b0;
    end else begin
      restart <= 1'b0;
      if (bvalid && bready) bvalid <= 1'b0;
      if (wr) begin
        bvalid <= 1'b1;
        unique case (awaddr)
          REG_CTRL:   restart    <= wstrb[0] && wdata[0];
          REG_WIDTH:  img_width  <= merge(img_width, wdata, wstrb);
          REG_HEIGHT: img_height <= merge(img_height, wdata, wstrb);
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) frames <= '0;
    else if (frame_done) frames <= frames + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rvalid <= 1'b0;
      rdata  <= '0;
    end else begin
      if (rvalid && rready) rvalid <= 1'b0;
      if (rd) begin
        rvalid <= 1'b1;
        unique case (araddr)
          REG_WIDTH:  rdata <= 32'(img_width);
          REG_HEIGHT: rdata <= 32'(img_height);
          REG_STATUS: rdata <= frames;
          default:    rdata <= '0;
        endcase
      end
    end
  end

  a_bhold: assert property (@(posedge clk) disable iff (!rst_n) bvalid && !bready |=> bvalid);
  a_rhold: assert property (@(posedge clk) disable iff (!rst_n)
                            rvalid && !rready |=> rvalid && $stable(rdata));

endmodule
