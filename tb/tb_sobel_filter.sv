// tb_sobel_filter: streams several grey frames of different sizes through
// the filter and checks every output pixel against a reference Sobel
// evaluated here from the frame stored in the testbench.
//
// Expected stream: one output per input, in order. Output k of a W x H
// frame (row r = k / W, column c = k % W) is |Gh|+|Gv| (clamped to 255) of
// the 3x3 input block with rows r-2..r and columns c-2..c when r >= 2 and
// c >= 2, else 0; m_last is set on the frame's last pixel. The first frame
// runs at full rate with no back-pressure and checks the latency of exactly
// three edges from accepting a pixel to taking its result, and that results
// leave at one per cycle; the later frames use random gaps and random
// back-pressure. One frame is ended early by s_last.
module tb_sobel_filter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [15:0] img_width, img_height;
  logic        restart;
  logic [7:0]  s_data;  logic s_valid, s_last, s_ready;
  logic [7:0]  m_data;  logic m_valid, m_last, m_ready;

  sobel_filter dut (.*);

  localparam int MAXPIX = 64 * 16;
  int checks = 0, failures = 0;
  int cycle = 0;
  logic [7:0] img [MAXPIX];
  int acc_cycle [MAXPIX];
  int W, H, NPIX;          // NPIX: pixels actually sent (early end by s_last)
  int in_idx, out_idx;
  bit running, full_rate;
  int stalls = 0;

  function automatic int ref_out(int k);
    int r, c, gh, gv, s;
    r = k / W; c = k % W;
    if (r < 2 || c < 2) return 0;
    gh = (int'(img[r*W + c-2]) + 2*int'(img[r*W + c-1]) + int'(img[r*W + c]))
       - (int'(img[(r-2)*W + c-2]) + 2*int'(img[(r-2)*W + c-1]) + int'(img[(r-2)*W + c]));
    gv = (int'(img[(r-2)*W + c]) + 2*int'(img[(r-1)*W + c]) + int'(img[r*W + c]))
       - (int'(img[(r-2)*W + c-2]) + 2*int'(img[(r-1)*W + c-2]) + int'(img[r*W + c-2]));
    s = (gh < 0 ? -gh : gh) + (gv < 0 ? -gv : gv);
    return s > 255 ? 255 : s;
  endfunction

  always @(posedge clk) cycle <= cycle + 1;

  // source and sink, driven with nonblocking assignments on the clock edge
  always @(posedge clk) begin
    int i;
    i = in_idx;
    if (s_valid && s_ready) begin
      acc_cycle[in_idx] = cycle;
      i = in_idx + 1;
      in_idx <= i;
    end
    if (m_valid && !m_ready) stalls++;
    if (m_valid && m_ready) begin
      int e;
      e = ref_out(out_idx);
      checks++;
      if (int'(m_data) != e || m_last != (out_idx == NPIX - 1)) begin
        failures++;
        $display("frame %0dx%0d out %0d: got %0d/%0b exp %0d/%0b", W, H, out_idx,
                 m_data, m_last, e, out_idx == NPIX - 1);
      end
      checks++;
      if (full_rate ? (cycle - acc_cycle[out_idx] != 3) : (cycle - acc_cycle[out_idx] < 3)) begin
        failures++;
        $display("latency %0d for pixel %0d", cycle - acc_cycle[out_idx], out_idx);
      end
      out_idx <= out_idx + 1;
    end
    if (running && i < NPIX && (full_rate || $urandom_range(0, 3) != 0)) begin
      s_valid <= 1'b1;
      s_data  <= img[i];
      s_last  <= (i == NPIX - 1) && (NPIX != W * H);
    end else begin
      s_valid <= 1'b0;
    end
    m_ready <= full_rate || ($urandom_range(0, 2) != 0);
  end

  task automatic run_frame(int w, int h, bit fr, int npix);
    int t0;
    @(negedge clk);
    W = w; H = h; NPIX = npix; full_rate = fr;
    img_width = 16'(w); img_height = 16'(h);
    for (int k = 0; k < w * h; k++) img[k] = 8'($urandom);
    in_idx = 0; out_idx = 0;
    running = 1;
    t0 = cycle;
    wait (out_idx == NPIX);
    if (fr) begin
      // whole frame through in NPIX cycles plus the 3-cycle latency
      checks++;
      if (cycle - t0 > NPIX + 5) begin
        failures++;
        $display("throughput: %0d cycles for %0d pixels", cycle - t0, NPIX);
      end
    end
    running = 0;
    repeat (4) @(posedge clk);
  endtask

  initial begin
    s_valid = 0; s_data = 0; s_last = 0; m_ready = 0; restart = 0;
    img_width = 8; img_height = 6; running = 0; full_rate = 0;
    in_idx = 0; out_idx = 0; W = 8; H = 6; NPIX = 48;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    run_frame(16, 12, 1, 192);
    run_frame(16, 12, 0, 192);
    run_frame(7, 9, 0, 63);
    run_frame(64, 5, 0, 320);
    run_frame(5, 6, 0, 17);        // ended early by s_last
    run_frame(3, 3, 0, 9);
    run_frame(9, 7, 1, 63);
    checks++;
    if (stalls == 0) begin failures++; $display("back-pressure never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
