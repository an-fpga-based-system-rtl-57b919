// tb_transmission_layer: sends random instruction packages (0 to 4 payload
// words, known and unknown opcodes) with random gaps and a slow command
// consumer, and checks each decoded command, the NOP substitution and bad_cmd
// flag for unknown opcodes, dropping of surplus payload words and the result
// pass-through.
module tb_transmission_layer;
  import arc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [31:0] dl_data, res_data, ul_data;
  logic dl_valid = 0, dl_ready, cmd_valid, cmd_ready = 0, res_valid = 0, res_ready, ul_valid, ul_ready = 0, bad_cmd;
  cmd_t cmd;
  int checks = 0, failures = 0, bad_seen = 0;
  cmd_t exp_q[$];
  logic exp_bad[$];

  always #5 clk = ~clk;

  transmission_layer dut (.clk, .rst_n, .dl_data, .dl_valid, .dl_ready, .cmd, .cmd_valid, .cmd_ready,
    .res_data, .res_valid, .res_ready, .ul_data, .ul_valid, .ul_ready, .bad_cmd);

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send_word(logic [31:0] w);
    dl_data = w;
    dl_valid = 1;
    @(posedge clk);
    while (!dl_ready) @(posedge clk);
    @(negedge clk);
    dl_valid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
  endtask

  // consumer
  always @(negedge clk) if (rst_n) begin
    cmd_ready <= ($urandom_range(0, 3) == 0);
  end
  always @(posedge clk) if (cmd_valid && cmd_ready) begin
    cmd_t e;
    e = exp_q.pop_front();
    checks++;
    if (cmd !== e) begin
      failures++;
      $display("FAIL: cmd %h expected %h", cmd, e);
    end
  end
  always @(posedge clk) if (bad_cmd) bad_seen++;

  initial begin
    int nbad;
    dl_data = 0; res_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    nbad = 0;
    for (int p = 0; p < 300; p++) begin
      logic [7:0] op;
      int n;
      cmd_t e;
      logic [31:0] pl[4];
      op = ($urandom_range(0, 9) == 0) ? 8'($urandom_range(9, 255)) : 8'($urandom_range(0, 8));
      n = $urandom_range(0, 4);
      e = '0;
      e.op  = (op <= 8) ? opcode_e'(op) : OP_NOP;
      e.arg = 16'($urandom);
      if (op > 8) nbad++;
      for (int i = 0; i < n; i++) begin
        pl[i] = $urandom;
        if (i < MAX_PAYLOAD) e.payload[i] = pl[i];
      end
      exp_q.push_back(e);
      send_word({op, 8'(n), e.arg});
      for (int i = 0; i < n; i++) send_word(pl[i]);
    end
    while (exp_q.size() != 0) @(negedge clk);
    check(bad_seen == nbad, $sformatf("bad_cmd pulses %0d expected %0d", bad_seen, nbad));
    check(nbad > 0, "unknown opcodes were exercised");
    // result pass-through
    for (int i = 0; i < 50; i++) begin
      res_data = $urandom; res_valid = $urandom_range(0, 1); ul_ready = $urandom_range(0, 1);
      #1;
      check(ul_data == res_data && ul_valid == res_valid && res_ready == ul_ready, "uplink pass-through");
      @(negedge clk);
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
