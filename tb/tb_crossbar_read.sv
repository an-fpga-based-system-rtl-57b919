// tb_crossbar_read: line-parallel read of a 32x32 selectorless resistor
// crossbar through the whole FPGA interface at its default sizes.
// Word lines are channels 0-31 (clusters 0-3), bit lines channels 32-63
// (clusters 4-7).  For each row the active word line is set to voltage-source
// mode, the other word lines to ground and all bit lines to current-meter
// mode; then one read command averages 32 readings of all 32 bit lines.
// A simple stand-in for the analogue side gives each bit-line ADC the code
// 1e8 / R(row, column), plus or minus one LSB alternating from conversion to
// conversion, so the 32-reading average must return the code exactly.
// R(row, column) spans 1 kohm to 15 Mohm.  The ADC model converts in 400 cycles
// (4 us, an assumption).  Besides the 1024 results, the test checks that the
// whole array is read in under 50 ms at 100 MHz.
module tb_crossbar_read;
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
  int active_row = 0;

  always #5 clk = ~clk;

  arc_fpga_top dut (.*);

  // resistance of the device at (row, column), 1 kohm .. 15 Mohm
  function automatic real res_ohm(int r, int c);
    real decade [5] = '{1.0e3, 1.0e4, 1.0e5, 1.0e6, 1.0e7};
    int  d = (r + 3 * c) % 5;
    real m = 1.0 + 0.5 * ((r * 7 + c) % 3);   // 1, 1.5 or 2
    return (d == 4 && m > 1.4) ? 1.5e7 : decade[d] * m;
  endfunction

  function automatic int code_of(int r, int c);
    return int'(1.0e8 / res_ohm(r, c));
  endfunction

  int conversions [8];
  logic [7:0][17:0] codes [8];
  for (genvar cl = 0; cl < 8; cl++) begin : g_m
    always_comb
      for (int k = 0; k < 8; k++)
        codes[cl][k] = (cl < 4) ? 18'h0
                     : 18'(code_of(active_row, (cl - 4) * 8 + k) + ((conversions[cl] % 2 == 0) ? -1 : 1));
    adc_model #(.CONV(400)) adc (.clk, .convst(adc_convst[cl]), .sclk(adc_sclk[cl]), .cs_n(adc_cs_n[cl]),
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
    longint t_start, t_end;
    real ms;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (200) @(negedge clk);
    t_start = $time;
    // bit lines: current meters on the 110 kohm range
    send(OP_CFG_CH, {9'b0, MODE_IMETER, 3'b010, 1'b0}, 32'h0, 32'hFFFF_FFFF);
    for (int r = 0; r < 32; r++) begin
      logic [31:0] wl;
      wl = 32'h1 << r;
      send(OP_CFG_CH, {9'b0, MODE_GROUND, 3'b000, 1'b0}, ~wl, 32'h0);
      send(OP_CFG_CH, {9'b0, MODE_VSOURCE, 3'b000, 1'b0}, wl, 32'h0);
      // the read starts only after both configurations have been sent
      while (!dut.u_ctrl.cmd_ready || dut.u_ctrl.cmd_valid) @(negedge clk);
      active_row = r;
      send(OP_READ, 16'd5, 32'h0, 32'hFFFF_FFFF);
      for (int c = 0; c < 32; c++) begin
        int n;
        n = 0;
        while (!ul_valid && n < 200000) begin @(negedge clk); n++; end
        check(ul_data[31:26] == 6'(32 + c) && ul_data[17:0] == 18'(code_of(r, c)),
              $sformatf("row %0d col %0d: word %h expected code %0d", r, c, ul_data, code_of(r, c)));
        @(negedge clk);
      end
    end
    t_end = $time;
    ms = real'(t_end - t_start) / 1.0e6;   // ns to ms
    $display("32x32 array read in %0.2f ms at 100 MHz", ms);
    check(ms < 50.0, "array read in under 50 ms");
    for (int cl = 4; cl < 8; cl++) check(conversions[cl] == 32 * 32, "32 readings per row");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
