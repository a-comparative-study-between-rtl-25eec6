// tb_rgb2gray: random colour pixels with random source gaps and sink
// back-pressure; every grey output is compared with floor((R+G+B)/3)
// computed here, the order and tlast of the words are checked, and a pixel
// taken with the output free must appear after exactly one edge.
module tb_rgb2gray;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] s_data;  logic s_valid, s_last, s_ready;
  logic [7:0]  m_data;  logic m_valid, m_last, m_ready;

  rgb2gray dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  int exp_q[$];
  int lat_q[$];
  int sent = 0, got = 0;
  localparam int N = 2000;

  function automatic int ref_gray(logic [31:0] w);
    return (int'(w[23:16]) + int'(w[15:8]) + int'(w[7:0])) / 3;
  endfunction

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      if (s_valid && s_ready) begin
        exp_q.push_back({ref_gray(s_data), 1'b0} | int'(s_last));
        lat_q.push_back(cycle);
        sent <= sent + 1;
      end
      if (m_valid && m_ready) begin
        int e, t;
        e = exp_q.pop_front();
        t = lat_q.pop_front();
        checks++;
        if (m_data != 8'(e >> 1) || m_last != e[0]) begin
          failures++;
          $display("mismatch %0d: got %0d/%0b exp %0d/%0b", got, m_data, m_last, e >> 1, e[0]);
        end
        got <= got + 1;
      end
      s_valid <= (sent < N) && ($urandom_range(0, 3) != 0);
      s_data  <= $urandom;
      s_last  <= ($urandom_range(0, 7) == 0);
      m_ready <= ($urandom_range(0, 3) != 0);
    end
  end

  // latency: with the output empty, an accepted pixel is offered after one edge
  logic acc_free;
  always @(posedge clk) begin
    if (rst_n) begin
      acc_free <= s_valid && s_ready && (!m_valid || m_ready);
      if (acc_free) begin
        checks++;
        if (!m_valid) begin failures++; $display("latency: output not valid one edge after accept"); end
      end
    end
  end

  initial begin
    s_valid = 0; s_data = 0; s_last = 0; m_ready = 0; acc_free = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (got == N);
    repeat (2) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
