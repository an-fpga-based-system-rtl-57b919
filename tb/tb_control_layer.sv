// tb_control_layer: drives decoded commands straight into the control layer
// (no FIFO or transmission layer) with models of the cluster periphery, and
// checks: switch frames of all eight clusters after OP_CFG_CH, a 4-reading
// average with readings that change from conversion to conversion, mask
// handling and result order, result back-pressure, the pulse stall rule (a
// second pulse on a busy cluster waits, a pulse on another cluster does not),
// the current-source code and a logic-bank read.
module tb_control_layer;
  import arc_pkg::*;

  logic clk = 0, rst_n = 0;
  cmd_t cmd;
  logic cmd_valid = 0, cmd_ready;
  logic [31:0] res_data;
  logic res_valid, res_ready = 1;
  logic [7:0] sw_sclk, sw_sdo, sw_cs_n, dac_sclk, dac_sdo, dac_cs_n;
  logic [7:0] adc_convst, adc_busy, adc_sclk, adc_cs_n, adc_sdi, hs_drive;
  logic sel_sclk, sel_sdo, sel_cs_n, isrc_load, pulse_wait;
  logic [31:0] logic_o, logic_oe, logic_i = 32'h0BAD_F00D;
  logic [15:0] isrc_code;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  control_layer dut (.*);

  logic [79:0] sw_frame [8];
  int sw_nbits [8], sw_nframes [8], conversions [8];
  logic [7:0][17:0] codes [8];
  logic [23:0] dac_frame [8];
  int dac_nbits [8], dac_nframes [8];
  logic [31:0] sel_frame;
  int sel_nbits, sel_nframes;

  for (genvar c = 0; c < 8; c++) begin : g_m
    spi_capture #(.W(80)) swcap (.sclk(sw_sclk[c]), .sdo(sw_sdo[c]), .cs_n(sw_cs_n[c]),
      .frame(sw_frame[c]), .nbits(sw_nbits[c]), .nframes(sw_nframes[c]));
    spi_capture #(.W(24)) daccap (.sclk(dac_sclk[c]), .sdo(dac_sdo[c]), .cs_n(dac_cs_n[c]),
      .frame(dac_frame[c]), .nbits(dac_nbits[c]), .nframes(dac_nframes[c]));
    // channel k of cluster c reads 1000*c + 10*k - 50 + 3*n at conversion n
    always_comb for (int k = 0; k < 8; k++) codes[c][k] = 18'(1000 * c + 10 * k - 50 + 3 * conversions[c]);
    adc_model #(.CONV(10)) adc (.clk, .convst(adc_convst[c]), .sclk(adc_sclk[c]), .cs_n(adc_cs_n[c]),
      .codes(codes[c]), .busy(adc_busy[c]), .sdo(adc_sdi[c]), .conversions(conversions[c]));
  end
  spi_capture #(.W(32)) selcap (.sclk(sel_sclk), .sdo(sel_sdo), .cs_n(sel_cs_n),
    .frame(sel_frame), .nbits(sel_nbits), .nframes(sel_nframes));

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic issue(opcode_e op, logic [15:0] arg, logic [31:0] p0 = 0, logic [31:0] p1 = 0);
    @(negedge clk);
    cmd = '0; cmd.op = op; cmd.arg = arg; cmd.payload[0] = p0; cmd.payload[1] = p1;
    cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic wait_ready();
    int n = 0;
    @(negedge clk);
    while (!cmd_ready && n < 100000) begin @(negedge clk); n++; end
  endtask

  initial begin
    int got, stall_cycles, hs2, hs3;
    int exp_ch [$];
    cmd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait_ready();
    for (int c = 0; c < 8; c++) check(sw_nframes[c] == 1 && sw_frame[c] == '0, "reset frame");

    // channel 9 (cluster 1, position 1) to current meter with 110 kohm range, channel 63 to pulse mode
    issue(OP_CFG_CH, {9'b0, MODE_IMETER, 3'b010, 1'b0}, 32'h0000_0200, 32'h0);
    issue(OP_CFG_CH, {9'b0, MODE_PULSE, 3'b000, 1'b1}, 32'h0, 32'h8000_0000);
    wait_ready();
    check(sw_frame[1] == {60'h0, 10'b0000101000, 10'h0}, $sformatf("cluster 1 frame %h", sw_frame[1]));
    check(sw_frame[7] == {10'b0110000000, 70'h0}, $sformatf("cluster 7 frame %h", sw_frame[7]));
    check(sw_frame[0] == '0 && sw_nframes[0] == 3, "untouched cluster rewritten unchanged");

    // DAC write to cluster 6, address 11
    issue(OP_SET_DAC, 16'h006B, 32'h0000_8001);
    wait_ready();
    check(dac_frame[6] == 24'h3B8001 && dac_nframes[6] == 1 && dac_nframes[5] == 0, "DAC frame");

    // averaged read of four channels with result back-pressure
    exp_ch = '{0, 17, 40, 63};
    fork
      issue(OP_READ, 16'd2, 32'h0002_0001, 32'h8000_0100);
      begin
        got = 0;
        stall_cycles = 0;
        while (got < 4) begin
          @(negedge clk);
          res_ready = ($urandom_range(0, 3) == 0);
          #1;
          if (res_valid && !res_ready) stall_cycles++;
          if (res_valid && res_ready) begin
            int ch, c, k, e;
            ch = exp_ch[got]; c = ch / 8; k = ch % 8;
            // readings base+0, +3, +6, +9 average to base+4 (floor of 4.5)
            e = 1000 * c + 10 * k - 50 + 4;
            check(res_data == {6'(ch), 8'h0, 18'(e)}, $sformatf("result %0d: %h", got, res_data));
            got++;
          end
        end
        res_ready = 1;
      end
    join
    wait_ready();
    check(stall_cycles > 0, "result back-pressure exercised");
    for (int c = 0; c < 8; c++) check(conversions[c] == 4, "four conversions");

    // pulse stall rule
    hs2 = 0; hs3 = 0;
    fork
      begin
        issue(OP_PULSE, 16'h0004, {16'd4, 16'd200}, 32'd1);
        issue(OP_PULSE, 16'h0008, {16'd4, 16'd20}, 32'd1);   // other cluster: no wait
        issue(OP_PULSE, 16'h0004, {16'd4, 16'd10}, 32'd1);   // same cluster: waits
      end
      repeat (400) begin
        @(negedge clk);
        if (hs_drive[2]) hs2++;
        if (hs_drive[3]) hs3++;
        if (hs_drive[2] && hs_drive[3]) checks++;
      end
    join
    check(hs2 == 210 && hs3 == 20, $sformatf("pulse lengths %0d %0d", hs2, hs3));

    // current source, selectors, logic
    issue(OP_SET_CURRENT, 16'h1357);
    issue(OP_SET_SEL, 16'h0, 32'hA5A5_0001);
    wait_ready();
    check(isrc_code == 16'h1357 && sel_frame == 32'hA5A5_0001, "current and selector");
    issue(OP_SET_LOGIC, 16'h0, 32'hFFFF_0000, 32'h00FF_00FF);
    @(negedge clk);
    check(logic_o == 32'hFFFF_0000 && logic_oe == 32'h00FF_00FF, "logic outputs");
    issue(OP_READ_LOGIC, 16'h0);
    #1;
    check(res_valid && res_data == 32'h0BAD_F00D, "logic read");
    wait_ready();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
