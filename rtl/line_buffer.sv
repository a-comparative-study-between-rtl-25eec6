// line_buffer: one image row of grey pixels held in block RAM.
//
// A simple dual-port memory with the ports the paper draws for LB_1 and LB_2:
// D (data_in), W_Addr, W_en on the write side and R_Addr, R_en, Q (data_out)
// on the read side. The read is synchronous: Q shows the word at R_Addr one
// clock after an edge with R_en high, and holds while R_en is low, which is
// what lets the filter pipeline stall. A read and a write to the same address
// on one edge return the old word (read-first); the filter never does that.
//
// DEPTH defaults to 2048 words of 8 bits, the size of one 18-Kbit block RAM
// in its 2K x 9 shape; the paper says each line buffer is one RAMB18. The
// depth bounds the widest image row the filter can process.
module line_buffer
  import sobel_pkg::*;
#(
  parameter int unsigned DEPTH  = 2048,
  parameter int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic [ADDR_W-1:0] w_addr,
  input  logic              w_en,
  input  pixel_t            d,
  input  logic [ADDR_W-1:0] r_addr,
  input  logic              r_en,
  output pixel_t            q
);

  pixel_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (w_en) mem[w_addr] <= d;
  end

  always_ff @(posedge clk) begin
    if (r_en) q <= mem[r_addr];
  end

endmodule
