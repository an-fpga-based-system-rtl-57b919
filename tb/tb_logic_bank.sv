// tb_logic_bank: checks that reset leaves every pin an input, that load sets
// values and enables one cycle later and holds them, and that inputs reach
// in_sync exactly two cycles after they change.
module tb_logic_bank;
  import arc_pkg::*;
  logic clk = 0, rst_n = 0, load = 0;
  logic [31:0] out_val, out_en, pin_o, pin_oe, pin_i, in_sync;
  int checks = 0, failures = 0;
  logic [31:0] hist[$];

  always #5 clk = ~clk;

  logic_bank dut (.clk, .rst_n, .load, .out_val, .out_en, .pin_o, .pin_oe, .pin_i, .in_sync);

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [31:0] v, e;
    out_val = '1; out_en = '1; pin_i = 0;
    repeat (3) @(negedge clk);
    check(pin_oe == 0 && pin_o == 0, "reset: all inputs");
    rst_n = 1;
    @(negedge clk);
    check(pin_oe == 0, "no load, no enable");
    for (int t = 0; t < 50; t++) begin
      v = $urandom; e = $urandom;
      out_val = v; out_en = e; load = 1;
      @(negedge clk);
      load = 0; out_val = ~v; out_en = ~e;
      check(pin_o == v && pin_oe == e, "load");
      @(negedge clk);
      check(pin_o == v && pin_oe == e, "hold without load");
    end
    for (int t = 0; t < 200; t++) begin
      pin_i = $urandom;
      hist.push_back(pin_i);
      @(negedge clk);
      if (hist.size() >= 2) begin
        check(in_sync == hist[hist.size()-2], "two-cycle input latency");
      end
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
