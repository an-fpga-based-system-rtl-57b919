// tb_selector_bank: writes random selector states, captures the serial frame,
// checks data, frame length, the 131-cycle (1.31 us) update time and the kept
// state, and checks that rewriting the same state sends no frame.
module tb_selector_bank;
  import arc_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done, sclk, sdo, cs_n;
  logic [31:0] new_state, state, frame;
  int nbits, nframes;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  selector_bank dut (.clk, .rst_n, .start, .new_state, .busy, .done, .state, .sclk, .sdo, .cs_n);
  spi_capture #(.W(32)) cap (.sclk, .sdo, .cs_n, .frame, .nbits, .nframes);

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write(logic [31:0] v, output int cyc);
    new_state = v;
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
    @(negedge clk);
  endtask

  initial begin
    int cyc, nf;
    new_state = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(state == 0, "reset state");
    for (int t = 0; t < 10; t++) begin
      logic [31:0] v;
      v = $urandom | 32'h1;
      nf = nframes;
      write(v, cyc);
      check(frame == v && nbits == 32, $sformatf("frame %h expected %h", frame, v));
      check(nframes == nf + 1, "one frame per write");
      check(cyc == 131, $sformatf("update time %0d cycles", cyc));
      check(state == v, "state kept");
      nf = nframes;
      write(v, cyc);
      check(nframes == nf, "unchanged state sends nothing");
      check(cyc == 1, "unchanged state completes at once");
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
