// tb_cmd_fifo: random writes and reads against a reference queue.  Checks order
// and data, that the FIFO holds exactly DEPTH = 3 words (one instruction
// package) before it refuses a write, and that it never refuses while empty.
module tb_cmd_fifo;
  import arc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [31:0] s_data, m_data;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  int checks = 0, failures = 0;
  logic [31:0] q[$];

  always #5 clk = ~clk;

  cmd_fifo dut (.clk, .rst_n, .s_data, .s_valid, .s_ready, .m_data, .m_valid, .m_ready);

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int filled;
    s_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!m_valid && s_ready, "empty after reset");
    // fill without reading: exactly 3 words fit
    filled = 0;
    s_valid = 1;
    for (int i = 0; i < 6; i++) begin
      s_data = 32'hA000_0000 + i;
      #1;
      if (!s_ready) break;
      q.push_back(s_data);
      filled++;
      @(negedge clk);
    end
    s_valid = 0;
    check(filled == MAX_PKG_WORDS, $sformatf("capacity %0d", filled));
    check(!s_ready, "full FIFO refuses writes");
    // random traffic
    for (int i = 0; i < 2000; i++) begin
      if (!(s_valid && !s_ready)) begin   // offered data stays until taken
        s_valid = ($urandom_range(0, 1) == 1);
        s_data  = $urandom;
      end
      m_ready = ($urandom_range(0, 2) != 0);
      #1;
      if (m_valid) check(q.size() > 0 && m_data == q[0], "read data");
      if (q.size() == 0) check(!m_valid, "empty has no valid");
      if (q.size() < MAX_PKG_WORDS) check(s_ready, "room means ready");
      @(posedge clk);
      if (m_valid && m_ready) void'(q.pop_front());
      if (s_valid && s_ready) q.push_back(s_data);
      @(negedge clk);
    end
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
