// tb_line_buffer: random writes and reads against a reference array kept
// here. Checks the one-cycle read latency, that q holds while r_en is low,
// and that a same-edge read of the address being written returns the old
// word (read-first).
module tb_line_buffer;
  localparam int DEPTH = 2048;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [10:0] w_addr, r_addr;
  logic        w_en, r_en;
  logic [7:0]  d, q;

  line_buffer dut (.*);

  int checks = 0, failures = 0;
  logic [7:0] model [DEPTH];
  logic [7:0] exp_q;

  task automatic step(input logic we, input int wa, input logic [7:0] wd,
                      input logic re, input int ra);
    w_en = we; w_addr = 11'(wa); d = wd; r_en = re; r_addr = 11'(ra);
    @(posedge clk);
    if (re) exp_q = model[ra];      // read-first: value before this edge's write
    if (we) model[wa] = wd;
    #1;
    checks++;
    if (q !== exp_q) begin
      failures++;
      $display("q=%0h exp=%0h (re=%0b ra=%0d)", q, exp_q, re, ra);
    end
    @(negedge clk);
  endtask

  initial begin
    w_en = 0; r_en = 0; w_addr = 0; r_addr = 0; d = 0;
    @(negedge clk);
    // fill every word once, reading nothing
    for (int a = 0; a < DEPTH; a++) begin
      w_en = 1; w_addr = 11'(a); d = 8'($urandom); r_en = 0;
      @(posedge clk); model[a] = d; @(negedge clk);
    end
    r_en = 1; r_addr = 0; w_en = 0;
    @(posedge clk); exp_q = model[0]; @(negedge clk);
    for (int i = 0; i < 5000; i++)
      step($urandom_range(0,1) != 0, $urandom_range(0, DEPTH-1), 8'($urandom),
           $urandom_range(0,3) != 0, $urandom_range(0, DEPTH-1));
    // same-address collisions
    for (int i = 0; i < 200; i++) begin
      int a; a = $urandom_range(0, DEPTH-1);
      step(1, a, 8'($urandom), 1, a);
    end
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
