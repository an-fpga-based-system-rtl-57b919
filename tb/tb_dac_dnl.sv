// tb_dac_dnl: mixed-signal test of an 8-bit DAC (0-2.56 V, 10 mV per code)
// through the whole FPGA interface at default sizes.  The DAC's digital inputs
// hang on logic-bank outputs 0-7; its output is read by channel 16 in
// voltage-meter mode, with the neighbouring analogue pins grounded.  For every
// code 0..255 the test writes the code, reads channel 16 (4 readings averaged)
// and rebuilds the transfer curve and the differential non-linearity (DNL) from
// the results.  The stand-in DAC has a known code-dependent error, so both the
// readings and the worst DNL can be checked exactly.  ADC codes are 78.125 uV,
// so one DAC step is 128 ADC codes.
module tb_dac_dnl;
  import arc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [31:0] dl_data = 0, ul_data;
  logic dl_valid = 0, dl_ready, ul_valid, ul_ready = 1;
  logic [10:0] ul_level;
  logic [7:0] sw_sclk, sw_sdo, sw_cs_n, dac_sclk, dac_sdo, dac_cs_n;
  logic [7:0] adc_convst, adc_busy, adc_sclk, adc_cs_n, adc_sdi, hs_drive;
  logic sel_sclk, sel_sdo, sel_cs_n, isrc_load, bad_cmd, pulse_wait;
  logic [31:0] logic_o, logic_oe, logic_i = 0;
  logic [15:0] isrc_code;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  arc_fpga_top dut (.*);

  // DAC output in ADC codes: 128 per step plus an error of -30..+30 codes
  function automatic int dac_out(int code);
    return 128 * code + 10 * ((code * 37) % 7 - 3);
  endfunction

  int conversions [8];
  logic [7:0][17:0] codes [8];
  for (genvar cl = 0; cl < 8; cl++) begin : g_m
    always_comb
      for (int k = 0; k < 8; k++)
        codes[cl][k] = (cl == 2 && k == 0 && logic_oe[7:0] == 8'hFF) ? 18'(dac_out(int'(logic_o[7:0]))) : 18'h0;
    adc_model #(.CONV(20)) adc (.clk, .convst(adc_convst[cl]), .sclk(adc_sclk[cl]), .cs_n(adc_cs_n[cl]),
      .codes(codes[cl]), .busy(adc_busy[cl]), .sdo(adc_sdi[cl]), .conversions(conversions[cl]));
  end

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send_word(logic [31:0] w);
    @(negedge clk);
    dl_data = w;
    dl_valid = 1;
    @(posedge clk);
    while (!dl_ready) @(posedge clk);
    @(negedge clk);
    dl_valid = 0;
  endtask

  task automatic send(opcode_e op, logic [15:0] arg, logic [31:0] p0, logic [31:0] p1);
    send_word({op, 8'd2, arg});
    send_word(p0);
    send_word(p1);
  endtask

  initial begin
    int v [256];
    real dnl, worst, exp_worst;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (200) @(negedge clk);
    // channel 16 reads the DAC output; channels 17-20 stand for the grounded pins
    send(OP_CFG_CH, {9'b0, MODE_VMETER, 3'b000, 1'b0}, 32'h0001_0000, 32'h0);
    send(OP_CFG_CH, {9'b0, MODE_GROUND, 3'b000, 1'b0}, 32'h001E_0000, 32'h0);
    for (int code = 0; code < 256; code++) begin
      int n;
      send(OP_SET_LOGIC, 16'h0, 32'(code), 32'h0000_00FF);
      send(OP_READ, 16'd2, 32'h0001_0000, 32'h0);
      n = 0;
      while (!ul_valid && n < 100000) begin @(negedge clk); n++; end
      v[code] = int'($signed(ul_data[17:0]));
      check(ul_data[31:26] == 6'd16 && v[code] == dac_out(code), $sformatf("code %0d read %0d expected %0d", code, v[code], dac_out(code)));
      @(negedge clk);
    end
    worst = 0.0;
    exp_worst = 0.0;
    for (int code = 1; code < 256; code++) begin
      real e;
      dnl = real'(v[code] - v[code - 1]) / 128.0 - 1.0;
      e   = real'(dac_out(code) - dac_out(code - 1)) / 128.0 - 1.0;
      if ((dnl < 0 ? -dnl : dnl) > worst) worst = (dnl < 0 ? -dnl : dnl);
      if ((e < 0 ? -e : e) > exp_worst) exp_worst = (e < 0 ? -e : e);
    end
    $display("worst DNL %0.3f LSB (expected %0.3f LSB)", worst, exp_worst);
    check(worst == exp_worst, "worst DNL");
    check(logic_oe == 32'h0000_00FF && logic_o == 32'd255, "logic bank left at the last code");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
