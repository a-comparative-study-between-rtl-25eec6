// u8tou32: packs four 8-bit pixels into one 32-bit stream word.
//
// Pixels are placed little-endian: the first pixel of each group of four in
// bits [7:0], the fourth in [31:24], so that the word written to memory by
// the DMA holds the pixels in their original byte order. Packing four 8-bit
// values into one 32-bit word follows the paper; the byte order, and the
// flush of a partial word (upper bytes zero) when s_last arrives before the
// fourth pixel, are this design's choices. m_last is set on the word that
// holds a pixel marked s_last.
//
// Timing: the word is registered; it is offered on m_* right after the
// edge that accepts its fourth (or last) pixel. One pixel per cycle in, one
// word per four cycles out. s_ready = !m_valid | m_ready.
module u8tou32
  import sobel_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  pixel_t            s_data,
  input  logic              s_valid,
  input  logic              s_last,
  output logic              s_ready,
  output logic [AXIS_W-1:0] m_data,
  output logic              m_valid,
  output logic              m_last,
  input  logic              m_ready
);

  logic [AXIS_W-1:0] acc, acc_next;
  logic [1:0]        cnt;

  assign s_ready = !m_valid || m_ready;

  always_comb begin
    acc_next = acc;
    acc_next[cnt*8 +: 8] = s_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      cnt     <= '0;
      m_data  <= '0;
      m_valid <= 1'b0;
      m_last  <= 1'b0;
    end else begin
      if (m_valid && m_ready) m_valid <= 1'b0;
      if (s_valid && s_ready) begin
        if (cnt == 2'd3 || s_last) begin
          m_data  <= acc_next;
          m_valid <= 1'b1;
          m_last  <= s_last;
          acc     <= '0;
          cnt     <= '0;
        end else begin
          acc <= acc_next;
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           m_valid && !m_ready |=> m_valid && $stable(m_data) && $stable(m_last));

endmodule
