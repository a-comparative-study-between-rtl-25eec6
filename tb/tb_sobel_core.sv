// tb_sobel_core: end-to-end test of the edge-detection core at its default
// parameters. For each frame the testbench sets WIDTH and HEIGHT over
// AXI4-Lite, streams colour pixels in and collects the packed edge words.
//
// Reference, computed here: colour pixel k is a hash of (frame, k); its
// grey value is floor((R+G+B)/3); edge pixel k of a W x H frame (row r,
// column c) is |Gh|+|Gv| clamped to 255 over grey rows r-2..r and columns
// c-2..c, or 0 when r < 2 or c < 2; four edge pixels per word, first in
// [7:0]; tlast on the last word. Frames include strong-edge images (to
// reach the clamp), a frame ended early by the input tlast, frames with a
// size change between them, random source gaps and random back-pressure.
// At full rate the word holding pixels k..k+3 must be taken 5 edges after
// pixel k+3 was accepted. Each mechanism is counted and must occur.
module tb_sobel_core;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] s_axis_tdata;  logic s_axis_tvalid, s_axis_tlast, s_axis_tready;
  logic [31:0] m_axis_tdata;  logic m_axis_tvalid, m_axis_tlast, m_axis_tready;
  logic [3:0]  s_axil_awaddr, s_axil_araddr;
  logic        s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready;
  logic        s_axil_bvalid, s_axil_bready, s_axil_arvalid, s_axil_arready;
  logic        s_axil_rvalid, s_axil_rready;
  logic [31:0] s_axil_wdata, s_axil_rdata;
  logic [3:0]  s_axil_wstrb;
  logic [1:0]  s_axil_bresp, s_axil_rresp;

  sobel_core dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  int W, H, NPIX, frame_no, style;
  int in_idx, out_word;
  bit running, full_rate;
  int acc_cycle [64];
  // mechanism counters
  int n_stall = 0, n_gap = 0, n_border = 0, n_clamp = 0, n_early = 0, n_resize = 0, n_frames = 0;

  function automatic logic [31:0] colour(int k);
    logic [31:0] h;
    h = 32'(k) * 32'h9E3779B1 ^ 32'(frame_no) * 32'h85EBCA77;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    if (style == 1) begin            // high-contrast checkerboard of 3x3 tiles
      int r, c;
      r = k / W; c = k % W;
      return (((r / 3) + (c / 3)) % 2 == 1) ? 32'h00FF_FFFF : 32'h0000_0000;
    end
    return h;                         // byte [31:24] is ignored by the core
  endfunction

  function automatic int gray(int r, int c);
    logic [31:0] p;
    p = colour(r * W + c);
    return (int'(p[23:16]) + int'(p[15:8]) + int'(p[7:0])) / 3;
  endfunction

  function automatic int edge_ref(int k, output bit clamped);
    int r, c, gh, gv, s;
    clamped = 0;
    r = k / W; c = k % W;
    if (r < 2 || c < 2) return 0;
    gh = (gray(r, c-2) + 2*gray(r, c-1) + gray(r, c))
       - (gray(r-2, c-2) + 2*gray(r-2, c-1) + gray(r-2, c));
    gv = (gray(r-2, c) + 2*gray(r-1, c) + gray(r, c))
       - (gray(r-2, c-2) + 2*gray(r-1, c-2) + gray(r, c-2));
    s = (gh < 0 ? -gh : gh) + (gv < 0 ? -gv : gv);
    clamped = (s > 255);
    return s > 255 ? 255 : s;
  endfunction

  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) begin
    int i;
    i = in_idx;
    if (running && !s_axis_tvalid && i < NPIX) n_gap++;
    if (s_axis_tvalid && s_axis_tready) begin
      acc_cycle[in_idx % 64] = cycle;
      i = in_idx + 1;
      in_idx <= i;
    end
    if (m_axis_tvalid && !m_axis_tready) n_stall++;
    if (m_axis_tvalid && m_axis_tready) begin
      logic [31:0] e;
      bit last_e, cl;
      int nvalid;
      e = '0;
      nvalid = (NPIX - out_word * 4 >= 4) ? 4 : NPIX - out_word * 4;
      for (int b = 0; b < nvalid; b++) begin
        int k, v;
        k = out_word * 4 + b;
        v = edge_ref(k, cl);
        e[b*8 +: 8] = 8'(v);
        if (k / W < 2 || k % W < 2) n_border++;
        if (cl) n_clamp++;
      end
      last_e = (out_word * 4 + nvalid == NPIX);
      checks++;
      if (m_axis_tdata != e || m_axis_tlast != last_e) begin
        failures++;
        if (failures < 10)
          $display("frame %0d (%0dx%0d) word %0d: got %08h/%0b exp %08h/%0b", frame_no, W, H,
                   out_word, m_axis_tdata, m_axis_tlast, e, last_e);
      end
      if (full_rate && nvalid == 4) begin
        checks++;
        if (cycle - acc_cycle[(out_word * 4 + 3) % 64] != 5) begin
          failures++;
          $display("latency %0d for word %0d", cycle - acc_cycle[(out_word * 4 + 3) % 64], out_word);
        end
      end
      if (last_e) n_frames++;
      out_word <= out_word + 1;
    end
    if (running && i < NPIX && (full_rate || $urandom_range(0, 4) != 0)) begin
      s_axis_tvalid <= 1'b1;
      s_axis_tdata  <= colour(i);
      s_axis_tlast  <= (i == NPIX - 1) && (NPIX != W * H);
    end else begin
      s_axis_tvalid <= 1'b0;
    end
    m_axis_tready <= full_rate || ($urandom_range(0, 3) != 0);
  end

  task automatic axil_write(logic [3:0] a, logic [31:0] d);
    @(negedge clk);
    s_axil_awaddr = a; s_axil_wdata = d; s_axil_wstrb = 4'hF;
    s_axil_awvalid = 1; s_axil_wvalid = 1; s_axil_bready = 1;
    do @(posedge clk); while (!s_axil_awready);
    @(negedge clk);
    s_axil_awvalid = 0; s_axil_wvalid = 0;
    while (!s_axil_bvalid) @(negedge clk);
    @(negedge clk);
    s_axil_bready = 0;
  endtask

  task automatic axil_read(logic [3:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axil_araddr = a; s_axil_arvalid = 1; s_axil_rready = 1;
    do @(posedge clk); while (!s_axil_arready);
    @(negedge clk);
    s_axil_arvalid = 0;
    while (!s_axil_rvalid) @(negedge clk);
    d = s_axil_rdata;
    @(negedge clk);
    s_axil_rready = 0;
  endtask

  task automatic run_frame(int w, int h, bit fr, int npix, int st);
    logic [31:0] d;
    if (w != W || h != H) n_resize++;
    axil_write(4'h4, 32'(w));
    axil_write(4'h8, 32'(h));
    axil_read(4'h4, d);
    checks++; if (d != 32'(w)) failures++;
    @(negedge clk);
    W = w; H = h; NPIX = npix; full_rate = fr; style = st;
    if (npix != w * h) n_early++;
    in_idx = 0; out_word = 0;
    running = 1;
    wait (out_word == (npix + 3) / 4);
    running = 0;
    frame_no++;
    repeat (6) @(posedge clk);
  endtask

  initial begin
    logic [31:0] d;
    s_axis_tvalid = 0; s_axis_tdata = 0; s_axis_tlast = 0; m_axis_tready = 0;
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 0; s_axil_arvalid = 0;
    s_axil_rready = 0; s_axil_awaddr = 0; s_axil_araddr = 0; s_axil_wdata = 0; s_axil_wstrb = 0;
    W = 512; H = 512; NPIX = 0; frame_no = 0; style = 0; running = 0; full_rate = 0;
    in_idx = 0; out_word = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    run_frame(32, 8, 1, 256, 0);
    run_frame(32, 8, 0, 256, 1);
    run_frame(12, 10, 0, 120, 0);
    run_frame(20, 6, 0, 58, 0);      // ended early by tlast, partial last word
    run_frame(64, 12, 0, 768, 1);
    run_frame(16, 16, 1, 256, 1);
    axil_read(4'hC, d);
    checks++;
    if (d != 32'(n_frames)) begin failures++; $display("STATUS %0d frames, counted %0d", d, n_frames); end
    $display("mechanisms: stall=%0d gap=%0d border=%0d clamp=%0d early_end=%0d resize=%0d frames=%0d",
             n_stall, n_gap, n_border, n_clamp, n_early, n_resize, n_frames);
    checks += 6;
    if (n_stall == 0)  begin failures++; $display("back-pressure never happened"); end
    if (n_gap == 0)    begin failures++; $display("source gap never happened"); end
    if (n_border == 0) begin failures++; $display("border zeroing never happened"); end
    if (n_clamp == 0)  begin failures++; $display("clamp never happened"); end
    if (n_early == 0)  begin failures++; $display("early frame end never happened"); end
    if (n_resize == 0) begin failures++; $display("size change never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
