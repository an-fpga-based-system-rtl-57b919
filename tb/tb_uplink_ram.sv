// tb_uplink_ram: fills the 1024-word result memory with the read side stalled
// and checks that it takes DEPTH+1 words (array plus output register) and
// reports the level, then drains it in order, then runs random traffic against
// a reference queue.
module tb_uplink_ram;
  localparam int DEPTH = 1024;
  logic clk = 0, rst_n = 0;
  logic [31:0] s_data, m_data;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  logic [$clog2(DEPTH+2)-1:0] level;
  int checks = 0, failures = 0;
  logic [31:0] q[$];

  always #5 clk = ~clk;

  uplink_ram dut (.clk, .rst_n, .s_data, .s_valid, .s_ready, .m_data, .m_valid, .m_ready, .level);

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
    check(!m_valid && s_ready && level == 0, "empty after reset");
    filled = 0;
    s_valid = 1;
    for (int i = 0; i < DEPTH + 10; i++) begin
      s_data = 32'h5000_0000 + i;
      #1;
      if (!s_ready) break;
      q.push_back(s_data);
      filled++;
      @(negedge clk);
    end
    s_valid = 0;
    @(negedge clk);
    check(filled == DEPTH + 1, $sformatf("capacity %0d", filled));
    check(level == DEPTH + 1, $sformatf("level %0d", level));
    check(!s_ready, "full memory refuses writes");
    // drain
    m_ready = 1;
    for (int i = 0; i < DEPTH + 1; i++) begin
      #1;
      check(m_valid && m_data == q[0], $sformatf("drain word %0d", i));
      void'(q.pop_front());
      @(negedge clk);
    end
    #1;
    check(!m_valid && level == 0, "empty after drain");
    for (int i = 0; i < 5000; i++) begin
      if (!(s_valid && !s_ready)) begin   // offered data stays until taken
        s_valid = ($urandom_range(0, 1) == 1);
        s_data  = $urandom;
      end
      m_ready = ($urandom_range(0, 3) != 0);
      #1;
      if (m_valid) check(q.size() > 0 && m_data == q[0], "read data");
      @(posedge clk);
      if (m_valid && m_ready) void'(q.pop_front());
      if (s_valid && s_ready) q.push_back(s_data);
      @(negedge clk);
      check(level == q.size(), "level tracks contents");
    end
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
