// sobel_filter: streaming 3x3 Sobel edge detector with two block-RAM line
// buffers and a four-task pipeline.
//
// How it works. The grey image arrives one pixel per cycle in raster order.
// Line buffer 2 holds the previous row and line buffer 1 the row before
// that, both addressed by the column of the incoming pixel. Each pixel goes
// through four tasks, one clock cycle each, overlapped across pixels:
//   1. input: the pixel is taken from the stream and both line buffers are
//      read at its column (registered pixel, registered block-RAM outputs);
//   2. window/write: the 3x3 window shifts in (LB1 word, LB2 word, pixel),
//      LB1 is written with the word read from LB2 and LB2 with the pixel, so
//      the two buffers roll down by one row at this column;
//   3. convolution: |Gh| + |Gv| of the window is computed and registered;
//   4. sending: the registered result is offered on the output stream.
// The two line buffers, the nine-register window, the LB2-to-LB1 and
// pixel-to-LB2 wiring and the four tasks follow the paper.
//
// This design's own choices: one output pixel per input pixel, so the output
// frame has the input's size; the result offered for the pixel at (row, col)
// is the gradient of the window whose newest pixel it is, i.e. centred on
// (row-1, col-1), and is 0 where that window does not lie inside the image
// (row < 2 or col < 2). The image size comes from img_width/img_height; a
// frame ends at its last pixel or at an input pixel marked s_last, whichever
// comes first, and a pulse on restart also returns the position to the
// frame's first pixel. m_last marks the frame's last pixel. img_width must be at least 2 and at most
// MAX_WIDTH.
//
// Timing: a pixel accepted on edge N is offered on m_* after edge N+2 (so
// it can be taken on edge N+3), one pixel per cycle. The whole pipeline
// stalls while a result is offered and m_ready is low; s_ready is then low.
module sobel_filter
  import sobel_pkg::*;
#(
  parameter int unsigned MAX_WIDTH = 2048,
  parameter int unsigned COL_W     = $clog2(MAX_WIDTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [DIM_W-1:0] img_width,
  input  logic [DIM_W-1:0] img_height,
  input  logic             restart,
  input  pixel_t           s_data,
  input  logic             s_valid,
  input  logic             s_last,
  output logic             s_ready,
  output pixel_t           m_data,
  output logic             m_valid,
  output logic             m_last,
  input  logic             m_ready
);

  logic en, accept;
  assign en      = !m_valid || m_ready;
  assign s_ready = en;
  assign accept  = s_valid && en;

  // ---- frame position of the next input pixel
  logic [COL_W-1:0] col;
  logic [DIM_W-1:0] row;
  logic             end_of_row, end_of_frame;

  assign end_of_row   = (DIM_W'(col) == img_width - 1'b1);
  assign end_of_frame = (end_of_row && (row == img_height - 1'b1)) || s_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col <= '0;
      row <= '0;
    end else if (restart) begin
      col <= '0;
      row <= '0;
    end else if (accept) begin
      if (end_of_frame) begin
        col <= '0;
        row <= '0;
      end else if (end_of_row) begin
        col <= '0;
        row <= row + 1'b1;
      end else begin
        col <= col + 1'b1;
      end
    end
  end

  // ---- task 1: pixel input and line-buffer read
  logic             va;
  pixel_t           pix_a;
  logic [COL_W-1:0] col_a;
  logic             inside_a, last_a;
  pixel_t           lb1_q, lb2_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      va       <= 1'b0;
      pix_a    <= '0;
      col_a    <= '0;
      inside_a <= 1'b0;
      last_a   <= 1'b0;
    end else if (en) begin
      va <= s_valid;
      if (s_valid) begin
        pix_a    <= s_data;
        col_a    <= col;
        inside_a <= (row >= DIM_W'(2)) && (col >= COL_W'(2));
        last_a   <= end_of_frame;
      end
    end
  end

  line_buffer #(.DEPTH(MAX_WIDTH)) u_line_buffer_1 (
    .clk    (clk),
    .w_addr (col_a),
    .w_en   (en && va),
    .d      (lb2_q),
    .r_addr (col),
    .r_en   (accept),
    .q      (lb1_q)
  );

  line_buffer #(.DEPTH(MAX_WIDTH)) u_line_buffer_2 (
    .clk    (clk),
    .w_addr (col_a),
    .w_en   (en && va),
    .d      (pix_a),
    .r_addr (col),
    .r_en   (accept),
    .q      (lb2_q)
  );

  // ---- task 2: line-buffer write and sliding-window fill
  pixel_t win [3][3];
  logic   vb, inside_b, last_b;

  sliding_window u_window (
    .clk    (clk),
    .rst_n  (rst_n),
    .shift  (en && va),
    .top_in (lb1_q),
    .mid_in (lb2_q),
    .bot_in (pix_a),
    .win    (win)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vb       <= 1'b0;
      inside_b <= 1'b0;
      last_b   <= 1'b0;
    end else if (en) begin
      vb <= va;
      if (va) begin
        inside_b <= inside_a;
        last_b   <= last_a;
      end
    end
  end

  // ---- task 3: convolution; task 4: the registered result is sent
  pixel_t mag;

  sobel_conv u_conv (
    .win (win),
    .mag (mag)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0;
      m_data  <= '0;
      m_last  <= 1'b0;
    end else if (en) begin
      m_valid <= vb;
      if (vb) begin
        m_data <= inside_b ? mag : '0;
        m_last <= last_b;
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           m_valid && !m_ready |=> m_valid && $stable(m_data) && $stable(m_last));

endmodule
