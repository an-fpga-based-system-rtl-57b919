// tb_serial_shifter: sends random 32-bit frames, receives them with a
// behavioural capture model, loops a known pattern back on `sdi`, and checks
// the frame length, both data directions and the frame time of
// 2*HALF_DIV*WIDTH + HALF_DIV + 1 cycles from start to done (131 cycles, 1.31 us
// at 100 MHz).
module tb_serial_shifter;
  localparam int W = 32, H = 2;
  logic clk = 0, rst_n = 0, start = 0, busy, done, sclk, sdo, cs_n, sdi;
  logic [W-1:0] tx, rx, pattern, psh;
  logic [W-1:0] frame;
  int nbits, nframes;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  serial_shifter #(.WIDTH(W), .HALF_DIV(H)) dut (
    .clk, .rst_n, .start, .tx_data(tx), .busy, .done, .rx_data(rx), .sclk, .sdo, .cs_n, .sdi);
  spi_capture #(.W(W)) cap (.sclk, .sdo, .cs_n, .frame, .nbits, .nframes);

  // loop-back device: presents `pattern` MSB first, updating after falling sclk
  always @(negedge cs_n) begin psh = pattern; sdi = psh[W-1]; end
  always @(negedge sclk) if (!cs_n) begin psh = psh << 1; sdi = psh[W-1]; end

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int cyc;
    sdi = 0;
    tx = '0;
    pattern = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(cs_n && !busy && !sclk, "idle state after reset");
    for (int t = 0; t < 20; t++) begin
      tx      = $urandom;
      pattern = $urandom;
      start   = 1;
      @(negedge clk);
      start = 0;
      tx    = ~tx;  // the frame must have been captured at start
      cyc   = 1;
      while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
      check(cyc == 2*H*W + H + 1, $sformatf("frame time %0d", cyc));
      check(frame == ~tx, $sformatf("sent %h expected %h", frame, ~tx));
      check(nbits == W, $sformatf("frame length %0d", nbits));
      check(rx == pattern, $sformatf("received %h expected %h", rx, pattern));
      check(nframes == t + 1, "frame count");
      @(negedge clk);
      check(!done && !busy && cs_n, "back to idle");
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
