// rgb2gray: colour to grey conversion by the arithmetic mean of R, G and B.
//
// Each accepted AXI-Stream word carries one colour pixel (layout in
// sobel_pkg::rgb_word_t). The block outputs gray = floor((R+G+B)/3) as one
// 8-bit pixel. Using the plain mean of the three components follows the
// paper; rounding down (integer division by the constant 3) is this design's
// choice.
//
// Interface: AXI-Stream slave (s_*) in, AXI-Stream master (m_*) out, with
// tlast passed along. Timing: one register stage, so a pixel accepted on a
// clock edge is offered on m_* right after that edge; one pixel per cycle.
// The stage holds its output while m_ready is low (s_ready = !m_valid | m_ready).
module rgb2gray
  import sobel_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [AXIS_W-1:0] s_data,
  input  logic              s_valid,
  input  logic              s_last,
  output logic              s_ready,
  output pixel_t            m_data,
  output logic              m_valid,
  output logic              m_last,
  input  logic              m_ready
);

  rgb_word_t  px;
  logic [9:0] sum;
  pixel_t     mean;

  always_comb begin
    px   = rgb_word_t'(s_data);
    sum  = 10'(px.r) + 10'(px.g) + 10'(px.b);
    mean = pixel_t'(sum / 10'd3);
  end

  assign s_ready = !m_valid || m_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0;
      m_data  <= '0;
      m_last  <= 1'b0;
    end else if (s_ready) begin
      m_valid <= s_valid;
      if (s_valid) begin
        m_data <= mean;
        m_last <= s_last;
      end
    end
  end

  // AXI-Stream rule: once offered, a word stays until taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           m_valid && !m_ready |=> m_valid && $stable(m_data) && $stable(m_last));

endmodule
