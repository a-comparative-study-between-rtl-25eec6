// tb_u8tou32: random bytes with random tlast, source gaps and sink
// back-pressure. Expected words are formed here: bytes in arrival order,
// first byte in [7:0], a word closed after four bytes or at tlast (upper
// bytes zero), tlast on the word that holds the tlast byte. Also checks
// that a word is offered right after the edge that took its last byte.
module tb_u8tou32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0]  s_data;  logic s_valid, s_last, s_ready;
  logic [31:0] m_data;  logic m_valid, m_last, m_ready;

  u8tou32 dut (.*);

  int checks = 0, failures = 0;
  logic [32:0] exp_q[$];     // {last, word}
  logic [31:0] cur = 0;
  int nb = 0, sent = 0, words = 0, partial = 0;
  bit closed_prev = 0;
  localparam int N = 4000;

  always @(posedge clk) begin
    if (rst_n) begin
      if (closed_prev) begin
        checks++;
        if (!m_valid) begin failures++; $display("word not offered after its last byte"); end
      end
      closed_prev <= 0;
      if (m_valid && m_ready) begin
        logic [32:0] e;
        e = exp_q.pop_front();
        checks++;
        if ({m_last, m_data} != e) begin
          failures++;
          $display("word %0d: got %0b/%08h exp %0b/%08h", words, m_last, m_data, e[32], e[31:0]);
        end
        words++;
      end
      if (s_valid && s_ready) begin
        cur[nb*8 +: 8] = s_data;
        nb++;
        sent++;
        if (nb == 4 || s_last) begin
          if (nb != 4) partial++;
          exp_q.push_back({s_last, cur});
          cur = 0; nb = 0;
          closed_prev <= 1;
        end
      end
      s_valid <= (sent < N) && ($urandom_range(0, 4) != 0);
      s_data  <= 8'($urandom);
      s_last  <= ($urandom_range(0, 9) == 0) || (sent == N - 1);
      m_ready <= ($urandom_range(0, 2) != 0);
    end
  end

  initial begin
    s_valid = 0; s_data = 0; s_last = 0; m_ready = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (sent == N && exp_q.size() == 0);
    repeat (3) @(posedge clk);
    checks++;
    if (partial == 0) begin failures++; $display("no partial word was flushed"); end
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
