// tb_cluster_ctrl: one cluster against behavioural models of its switch chain,
// DAC and ADC.  Checks the 80-bit switch frame for random channel modes (channel
// 7 first, expected bits written out independently), the 24-bit DAC frame, the
// eight ADC codes read back after a conversion (including the wait for BUSY),
// and the pulse width on hs_drive.
module tb_cluster_ctrl;
  import arc_pkg::*;
  logic clk = 0, rst_n = 0;
  ch_cfg_t [7:0] cfg;
  logic sw_start = 0, sw_busy, sw_done, sw_sclk, sw_sdo, sw_cs_n;
  logic dac_start = 0, dac_busy, dac_done, dac_sclk, dac_sdo, dac_cs_n;
  logic [3:0] dac_addr;
  logic [15:0] dac_code;
  logic adc_start = 0, adc_run, adc_done, adc_convst, adc_busy, adc_sclk, adc_cs_n, adc_sdi;
  logic [7:0][17:0] adc_codes, model_codes;
  logic pulse_start = 0, pulse_busy, hs_drive;
  logic [15:0] pulse_width, pulse_gap, pulse_count;
  logic [79:0] sw_frame;
  logic [23:0] dac_frame;
  int sw_nbits, sw_nframes, dac_nbits, dac_nframes, conversions;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  cluster_ctrl dut (.clk, .rst_n, .cfg,
    .sw_start, .sw_busy, .sw_done, .sw_sclk, .sw_sdo, .sw_cs_n,
    .dac_start, .dac_addr, .dac_code, .dac_busy, .dac_done, .dac_sclk, .dac_sdo, .dac_cs_n,
    .adc_start, .adc_run, .adc_done, .adc_codes, .adc_convst, .adc_busy, .adc_sclk, .adc_cs_n, .adc_sdi,
    .pulse_start, .pulse_width, .pulse_gap, .pulse_count, .pulse_busy, .hs_drive);

  spi_capture #(.W(80)) swcap (.sclk(sw_sclk), .sdo(sw_sdo), .cs_n(sw_cs_n), .frame(sw_frame), .nbits(sw_nbits), .nframes(sw_nframes));
  spi_capture #(.W(24)) daccap (.sclk(dac_sclk), .sdo(dac_sdo), .cs_n(dac_cs_n), .frame(dac_frame), .nbits(dac_nbits), .nframes(dac_nframes));
  adc_model #(.CONV(37)) adc (.clk, .convst(adc_convst), .sclk(adc_sclk), .cs_n(adc_cs_n), .codes(model_codes),
    .busy(adc_busy), .sdo(adc_sdi), .conversions);

  // {ADC GND, HS CONNECT, AC GND, DC GND, RANGE CONNECT, R[2:0], BYPASS, CS CONNECT}
  function automatic logic [9:0] expect_sw(ch_cfg_t c);
    logic [9:0] e;
    case (c.mode)
      MODE_VSOURCE: e = 10'b0000100010;
      MODE_GROUND:  e = 10'b0001000000;
      MODE_IMETER:  e = {5'b00001, c.range_sel, 2'b00};
      MODE_VMETER:  e = 10'b1000000000;
      MODE_ISOURCE: e = 10'b0000000001;
      MODE_PULSE:   e = 10'b0100000000;
      default:      e = 10'b0;
    endcase
    e[7] = c.ac_gnd;
    return e;
  endfunction

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wait_low(ref logic s);
    int n = 0;
    @(negedge clk);
    while (s && n < 5000) begin @(negedge clk); n++; end
  endtask

  initial begin
    logic [79:0] exp_frame;
    int t0, hs_cycles;
    cfg = '0; dac_addr = 0; dac_code = 0; model_codes = '0;
    pulse_width = 0; pulse_gap = 0; pulse_count = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // switch chain
    for (int t = 0; t < 20; t++) begin
      for (int k = 0; k < 8; k++) cfg[k] = ch_cfg_t'({3'($urandom_range(0, 6)), 3'($urandom), 1'($urandom)});
      exp_frame = '0;
      for (int k = 7; k >= 0; k--) exp_frame = {exp_frame[69:0], expect_sw(cfg[k])};
      sw_start = 1; @(negedge clk); sw_start = 0;
      wait_low(sw_busy);
      check(sw_nbits == 80 && sw_frame == exp_frame, $sformatf("switch frame %h expected %h", sw_frame, exp_frame));
    end
    // DAC
    for (int t = 0; t < 10; t++) begin
      dac_addr = 4'($urandom); dac_code = 16'($urandom);
      dac_start = 1; @(negedge clk); dac_start = 0;
      wait_low(dac_busy);
      check(dac_nbits == 24 && dac_frame == {4'h3, dac_addr, dac_code}, $sformatf("DAC frame %h", dac_frame));
    end
    // ADC
    for (int t = 0; t < 5; t++) begin
      for (int k = 0; k < 8; k++) model_codes[k] = 18'($urandom);
      adc_start = 1; @(negedge clk); adc_start = 0;
      t0 = 0;
      while (adc_run && t0 < 5000) begin @(negedge clk); t0++; end
      check(conversions == t + 1, "one conversion per read");
      check(adc_codes == model_codes, $sformatf("ADC codes %h expected %h", adc_codes, model_codes));
      // conversion (37) + read-out (576) + handshakes: the read must wait for BUSY
      check(t0 > 37 + 576, $sformatf("ADC read took %0d cycles", t0));
    end
    // pulse
    pulse_width = 7; pulse_gap = 4; pulse_count = 1;
    pulse_start = 1; @(negedge clk); pulse_start = 0;
    hs_cycles = 0;
    for (int i = 0; i < 20; i++) begin if (hs_drive) hs_cycles++; @(negedge clk); end
    check(hs_cycles == 7, $sformatf("pulse %0d cycles", hs_cycles));
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
