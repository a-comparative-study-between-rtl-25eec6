// tb_sobel_conv: drives random windows, flat windows, step edges and
// extreme windows, and compares the magnitude with a direct evaluation of
// the two 3x3 masks (as coefficient tables) here, |Gh|+|Gv| clamped to 255.
module tb_sobel_conv;
  logic [7:0] win [3][3];
  logic [7:0] mag;

  sobel_conv dut (.*);

  int checks = 0, failures = 0;
  int MH [3][3] = '{'{-1, -2, -1}, '{0, 0, 0}, '{1, 2, 1}};
  int MV [3][3] = '{'{-1, 0, 1}, '{-2, 0, 2}, '{-1, 0, 1}};

  function automatic int ref_mag();
    int gh = 0, gv = 0, s;
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++) begin
        gh += MH[r][c] * int'(win[r][c]);
        gv += MV[r][c] * int'(win[r][c]);
      end
    s = (gh < 0 ? -gh : gh) + (gv < 0 ? -gv : gv);
    return s > 255 ? 255 : s;
  endfunction

  task automatic check();
    int e;
    #1;
    e = ref_mag();
    checks++;
    if (int'(mag) != e) begin
      failures++;
      $display("mag=%0d exp=%0d", mag, e);
    end
  endtask

  initial begin
    // random windows, full range and low range (to stay below the clamp)
    for (int i = 0; i < 4000; i++) begin
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++)
          win[r][c] = (i % 2) ? 8'($urandom) : 8'($urandom_range(0, 40));
      check();
    end
    // flat windows: zero gradient
    for (int v = 0; v < 256; v += 17) begin
      for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) win[r][c] = 8'(v);
      check();
    end
    // small horizontal and vertical steps, both signs
    for (int s = 0; s < 4; s++)
      for (int k = 1; k < 60; k += 7) begin
        for (int r = 0; r < 3; r++)
          for (int c = 0; c < 3; c++) begin
            int pos;
            pos = (s < 2) ? r : c;
            win[r][c] = 8'((s % 2) ? (pos == 0 ? 100 + k : 100) : (pos == 2 ? 100 + k : 100));
          end
        check();
      end
    // largest gradient
    for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) win[r][c] = (r + c > 2) ? 8'd255 : 8'd0;
    check();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
