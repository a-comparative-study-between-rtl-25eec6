// tb_sliding_window: shifts random columns into the window with random
// gaps and compares all nine registers with a model of three 3-deep shift
// registers (column 2 newest) after every edge.
module tb_sliding_window;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       shift;
  logic [7:0] top_in, mid_in, bot_in;
  logic [7:0] win [3][3];

  sliding_window dut (.*);

  int checks = 0, failures = 0;
  logic [7:0] m [3][3];

  initial begin
    shift = 0; top_in = 0; mid_in = 0; bot_in = 0;
    for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) m[r][c] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      shift = ($urandom_range(0, 3) != 0);
      top_in = 8'($urandom); mid_in = 8'($urandom); bot_in = 8'($urandom);
      @(posedge clk);
      if (shift) begin
        for (int r = 0; r < 3; r++) begin m[r][0] = m[r][1]; m[r][1] = m[r][2]; end
        m[0][2] = top_in; m[1][2] = mid_in; m[2][2] = bot_in;
      end
      #1;
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++) begin
          checks++;
          if (win[r][c] !== m[r][c]) begin
            failures++;
            $display("win[%0d][%0d]=%0h exp %0h", r, c, win[r][c], m[r][c]);
          end
        end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
