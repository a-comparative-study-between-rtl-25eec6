// tb_axil_regs: AXI4-Lite transactions against the control registers.
// Checks reset values, writes and read-back of WIDTH and HEIGHT (with byte
// strobes), the one-cycle restart pulse from CTRL, the frame counter in
// STATUS, the response channels (OKAY, held until taken), and that the
// address and data may arrive on different cycles.
module tb_axil_regs;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [3:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready;
  logic        arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic [15:0] img_width, img_height;
  logic        restart, frame_done;

  axil_regs dut (.*);

  int checks = 0, failures = 0, pulses = 0;

  always @(posedge clk) if (restart) pulses++;

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0h exp %0h", what, got, exp);
    end
  endtask

  task automatic write(logic [3:0] a, logic [31:0] d, logic [3:0] s, int aw_delay, int b_delay);
    awaddr = a; wdata = d; wstrb = s;
    wvalid = 1;
    repeat (aw_delay) @(negedge clk);
    awvalid = 1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    chk("bvalid", bvalid, 1);
    repeat (b_delay) begin @(negedge clk); chk("bvalid held", bvalid, 1); end
    bready = 1;
    @(negedge clk);
    bready = 0;
    chk("bresp", bresp, 0);
    chk("bvalid dropped", bvalid, 0);
  endtask

  task automatic read(logic [3:0] a, output logic [31:0] d, input int r_delay);
    araddr = a; arvalid = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 0;
    repeat (r_delay) @(negedge clk);
    chk("rvalid", rvalid, 1);
    d = rdata;
    chk("rresp", rresp, 0);
    rready = 1;
    @(negedge clk);
    rready = 0;
  endtask

  initial begin
    logic [31:0] d;
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0; frame_done = 0;
    awaddr = 0; araddr = 0; wdata = 0; wstrb = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    read(4'h4, d, 0); chk("reset width", d, 512);
    read(4'h8, d, 1); chk("reset height", d, 512);
    read(4'hC, d, 0); chk("reset status", d, 0);
    write(4'h4, 32'd1920, 4'hF, 0, 0);
    write(4'h8, 32'd1080, 4'hF, 2, 3);
    chk("width out", img_width, 1920);
    chk("height out", img_height, 1080);
    read(4'h4, d, 2); chk("width", d, 1920);
    read(4'h8, d, 0); chk("height", d, 1080);
    write(4'h4, 32'h0000_AB03, 4'h1, 1, 0);       // only the low byte changes
    chk("strobe", img_width, 16'h0703);
    for (int i = 0; i < 20; i++) begin
      logic [15:0] w, h;
      w = 16'($urandom); h = 16'($urandom);
      write(4'h4, 32'(w), 4'hF, $urandom_range(0, 2), $urandom_range(0, 2));
      write(4'h8, 32'(h), 4'hF, $urandom_range(0, 2), $urandom_range(0, 2));
      read(4'h4, d, $urandom_range(0, 2)); chk("rand width", d, w);
      read(4'h8, d, $urandom_range(0, 2)); chk("rand height", d, h);
    end
    write(4'h0, 32'h1, 4'hF, 0, 0);
    write(4'h0, 32'h0, 4'hF, 0, 0);           // bit0 clear: no pulse
    write(4'h0, 32'h1, 4'hF, 1, 1);
    chk("restart pulses", pulses, 2);
    chk("restart low", restart, 0);
    for (int i = 0; i < 7; i++) begin frame_done = 1; @(negedge clk); frame_done = 0; @(negedge clk); end
    read(4'hC, d, 0); chk("frames", d, 7);
    write(4'hC, 32'h55, 4'hF, 0, 0);           // read-only: ignored
    read(4'hC, d, 0); chk("frames after write", d, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
