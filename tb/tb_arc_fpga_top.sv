// tb_arc_fpga_top: end-to-end test of the FPGA interface at its default sizes.
// Instruction packages enter through the downlink stream exactly as the USB core
// would deliver them; behavioural models stand in for the eight switch chains,
// DACs and ADCs and for the selector register.  The test runs every command and
// counts each mechanism of the design, failing any that never happened:
// channel configuration, DAC write, averaged parallel read (32 readings) with a
// channel mask, pulse with minimum-width clamp, asynchronous pulses in two
// clusters, a pulse on all clusters at once (no skew), a pulse stalled
// behind a busy cluster, current-source code,
// selector write and skipped unchanged write, logic-bank write and read,
// unknown opcode, downlink back-pressure and an uplink memory overflow that
// stalls a read until the PC side drains it.
module tb_arc_fpga_top;
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

  // ---------------- periphery models ----------------
  logic [79:0] sw_frame [8];
  logic [23:0] dac_frame [8];
  int sw_nbits [8], sw_nframes [8], dac_nbits [8], dac_nframes [8], conversions [8];
  logic [7:0][17:0] base [8];      // per-channel ADC code at the first conversion
  logic [7:0][17:0] codes [8];
  logic [31:0] sel_frame;
  int sel_nbits, sel_nframes;

  for (genvar c = 0; c < 8; c++) begin : g_m
    spi_capture #(.W(80)) swcap (.sclk(sw_sclk[c]), .sdo(sw_sdo[c]), .cs_n(sw_cs_n[c]),
      .frame(sw_frame[c]), .nbits(sw_nbits[c]), .nframes(sw_nframes[c]));
    spi_capture #(.W(24)) daccap (.sclk(dac_sclk[c]), .sdo(dac_sdo[c]), .cs_n(dac_cs_n[c]),
      .frame(dac_frame[c]), .nbits(dac_nbits[c]), .nframes(dac_nframes[c]));
    // reading n of a channel is base + n
    always_comb for (int k = 0; k < 8; k++) codes[c][k] = base[c][k] + 18'(conversions[c]);
    adc_model #(.CONV(20)) adc (.clk, .convst(adc_convst[c]), .sclk(adc_sclk[c]), .cs_n(adc_cs_n[c]),
      .codes(codes[c]), .busy(adc_busy[c]), .sdo(adc_sdi[c]), .conversions(conversions[c]));
  end
  spi_capture #(.W(32)) selcap (.sclk(sel_sclk), .sdo(sel_sdo), .cs_n(sel_cs_n),
    .frame(sel_frame), .nbits(sel_nbits), .nframes(sel_nframes));

  // ---------------- mechanism counters ----------------
  int n_dl_stall = 0, n_ul_stall = 0, n_pulse_wait = 0, n_bad = 0, n_isrc = 0, n_async = 0;
  always @(posedge clk) if (rst_n) begin
    if (dl_valid && !dl_ready) n_dl_stall++;
    if (dut.u_ctrl.res_valid && !dut.u_ctrl.res_ready) n_ul_stall++;
    if (pulse_wait) n_pulse_wait++;
    if (bad_cmd) n_bad++;
    if (isrc_load) n_isrc++;
    if (hs_drive[2] && hs_drive[5]) n_async++;
  end
  int n_cfg = 0, n_dac = 0, n_read = 0, n_mask = 0, n_pulse = 0, n_clamp = 0, n_sel = 0,
      n_sel_skip = 0, n_logic_w = 0, n_logic_r = 0, n_overflow = 0;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- USB-side helpers ----------------
  task automatic send_word(logic [31:0] w);
    @(negedge clk);
    dl_data = w;
    dl_valid = 1;
    @(posedge clk);
    while (!dl_ready) @(posedge clk);
    @(negedge clk);
    dl_valid = 0;
  endtask

  task automatic send(opcode_e op, logic [15:0] arg, logic [31:0] p0 = 0, logic [31:0] p1 = 0, int n = 0);
    send_word({op, 8'(n), arg});
    if (n > 0) send_word(p0);
    if (n > 1) send_word(p1);
  endtask

  task automatic wait_idle();
    int n = 0;
    do begin @(negedge clk); n++; end
    while (!(dut.u_ctrl.cmd_ready && !dut.u_ctrl.cmd_valid && !dut.u_fifo.m_valid) && n < 200000);
    @(negedge clk);
  endtask

  task automatic get_word(output logic [31:0] w);
    int n = 0;
    @(negedge clk);
    ul_ready = 1;
    while (!ul_valid && n < 200000) begin @(negedge clk); n++; end
    w = ul_data;
    @(posedge clk);
    @(negedge clk);
    ul_ready = 0;
  endtask

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

  // floor of the mean of base+0 .. base+n-1 as signed 18-bit readings
  function automatic int expect_avg(logic [17:0] b, int n);
    longint sum = 0;
    for (int i = 0; i < n; i++) sum += longint'($signed(18'(b + 18'(i))));
    return (sum >= 0) ? int'(sum / n) : -int'((-sum + n - 1) / n);
  endfunction

  ch_cfg_t model_cfg [64];

  task automatic do_read(logic [63:0] mask, int lg);
    logic [31:0] w;
    int c0 [8];
    int n;
    n = 1 << ((lg > MAX_AVG_LOG2) ? MAX_AVG_LOG2 : lg);
    for (int c = 0; c < 8; c++) c0[c] = conversions[c];
    send(OP_READ, 16'(lg), mask[31:0], mask[63:32], 2);
    for (int ch = 0; ch < 64; ch++) if (mask[ch]) begin
      int e;
      get_word(w);
      e = expect_avg(18'(base[ch/8][ch%8] + 18'(c0[ch/8])), n);
      check(w[31:26] == 6'(ch) && w[25:18] == 0 && $signed(w[17:0]) == 18'(e),
            $sformatf("read ch %0d: word %h expected code %0d", ch, w, e));
    end
    wait_idle();
    for (int c = 0; c < 8; c++) check(conversions[c] == c0[c] + n, $sformatf("conversions per read: %0d from %0d, %0d readings", conversions[c], c0[c], n));
    check(ul_level == 0, "no extra result words");
    n_read++;
  endtask

  initial begin
    logic [31:0] w;
    int hs_len [8];
    for (int c = 0; c < 8; c++) for (int k = 0; k < 8; k++) base[c][k] = 18'($urandom_range(0, 200000)) - 18'd100000;
    for (int i = 0; i < 64; i++) model_cfg[i] = '0;
    ul_ready = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait_idle();
    for (int c = 0; c < 8; c++) check(sw_nframes[c] == 1 && sw_frame[c] == '0, "all-open frame after reset");

    // ---- channel configuration: several modes over random masks ----
    for (int t = 0; t < 12; t++) begin
      logic [63:0] mask;
      ch_cfg_t cf;
      mask = {$urandom, $urandom};
      cf = ch_cfg_t'({3'($urandom_range(0, 6)), 3'($urandom), 1'($urandom)});
      for (int i = 0; i < 64; i++) if (mask[i]) model_cfg[i] = cf;
      send(OP_CFG_CH, {9'b0, cf}, mask[31:0], mask[63:32], 2);
      wait_idle();
      for (int c = 0; c < 8; c++) begin
        logic [79:0] e;
        e = '0;
        for (int k = 7; k >= 0; k--) e = {e[69:0], expect_sw(model_cfg[c*8+k])};
        check(sw_nframes[c] == t + 2 && sw_nbits[c] == 80 && sw_frame[c] == e,
              $sformatf("cluster %0d switch frame %h expected %h", c, sw_frame[c], e));
      end
      n_cfg++;
    end

    // ---- DAC writes ----
    for (int t = 0; t < 16; t++) begin
      int c, a;
      logic [15:0] code;
      c = $urandom_range(0, 7); a = $urandom_range(0, 15); code = 16'($urandom);
      send(OP_SET_DAC, {9'b0, 3'(c), 4'(a)}, {16'h0, code}, 0, 1);
      wait_idle();
      check(dac_frame[c] == {4'h3, 4'(a), code} && dac_nbits[c] == 24, $sformatf("DAC %0d frame %h", c, dac_frame[c]));
      n_dac++;
    end

    // ---- reads: all channels with 32 averages, then masks ----
    do_read('1, 5);
    do_read(64'h8000_0001_0F00_00F0, 2); n_mask++;
    do_read({$urandom, $urandom}, 0); n_mask++;
    do_read(64'h1, 7);   // log2 clamped to 5 (32 readings)

    // ---- pulses ----
    // minimum-width clamp: width 1 gives 4 cycles
    send(OP_PULSE, 16'h0001, {16'd4, 16'd1}, 32'd1, 2);
    wait_idle();
    repeat (10) @(negedge clk);
    // asynchronous pulses: cluster 2 long train, cluster 5 short pulse while 2 runs
    for (int c = 0; c < 8; c++) hs_len[c] = 0;
    fork
      begin
        send(OP_PULSE, 16'h0004, {16'd4, 16'd300}, 32'd1, 2);
        send(OP_PULSE, 16'h0020, {16'd4, 16'd13}, 32'd1, 2);
        // cluster 2 is still busy: this one must wait
        send(OP_PULSE, 16'h0004, {16'd4, 16'd6}, 32'd2, 2);
      end
      begin
        repeat (700) begin
          @(negedge clk);
          for (int c = 0; c < 8; c++) if (hs_drive[c]) hs_len[c]++;
        end
      end
    join
    check(hs_len[2] == 300 + 12, $sformatf("cluster 2 high for %0d cycles", hs_len[2]));
    check(hs_len[5] == 13, $sformatf("cluster 5 high for %0d cycles", hs_len[5]));
    check(hs_len[0] == 0 && hs_len[1] == 0, "other clusters quiet");
    n_pulse++;
    // clamp check
    for (int c = 0; c < 8; c++) hs_len[c] = 0;
    fork
      send(OP_PULSE, 16'h0080, {16'd4, 16'd2}, 32'd1, 2);
      repeat (60) begin @(negedge clk); if (hs_drive[7]) hs_len[7]++; end
    join
    check(hs_len[7] == MIN_PULSE_CYCLES, $sformatf("clamped pulse %0d cycles", hs_len[7]));
    n_clamp++;
    wait_idle();
    // one command to all eight clusters: identical waveforms, no skew
    begin
      int skew = 0;
      for (int c = 0; c < 8; c++) hs_len[c] = 0;
      fork
        send(OP_PULSE, 16'h00FF, {16'd5, 16'd5}, 32'd3, 2);
        repeat (80) begin
          @(negedge clk);
          if (hs_drive != 8'h00 && hs_drive != 8'hFF) skew++;
          for (int c = 0; c < 8; c++) if (hs_drive[c]) hs_len[c]++;
        end
      join
      check(skew == 0, $sformatf("%0d cycles with clusters out of step", skew));
      for (int c = 0; c < 8; c++) check(hs_len[c] == 15, $sformatf("cluster %0d high %0d cycles in a 3-pulse train", c, hs_len[c]));
      n_pulse++;
      wait_idle();
    end

    // ---- current source ----
    send(OP_SET_CURRENT, 16'hBEEF);
    wait_idle();
    check(isrc_code == 16'hBEEF, "current source code");

    // ---- selector bank ----
    begin
      int nf;
      nf = sel_nframes;
      send(OP_SET_SEL, 0, 32'hDEAD_BEEF, 0, 1);
      wait_idle();
      check(sel_frame == 32'hDEAD_BEEF && sel_nframes == nf + 1 && sel_nbits == 32, "selector frame");
      check(dut.u_ctrl.sel_state == 32'hDEAD_BEEF, "selector state");
      n_sel++;
      send(OP_SET_SEL, 0, 32'hDEAD_BEEF, 0, 1);
      wait_idle();
      check(sel_nframes == nf + 1, "unchanged selectors not resent");
      n_sel_skip++;
    end

    // ---- logic bank ----
    send(OP_SET_LOGIC, 0, 32'h1234_5678, 32'h0000_FFFF, 2);
    wait_idle();
    check(logic_o == 32'h1234_5678 && logic_oe == 32'h0000_FFFF, "logic outputs");
    n_logic_w++;
    logic_i = 32'hCAFE_F00D;
    repeat (4) @(negedge clk);
    send(OP_READ_LOGIC, 0);
    get_word(w);
    check(w == 32'hCAFE_F00D, $sformatf("logic read %h", w));
    n_logic_r++;

    // ---- unknown opcode with a payload ----
    send_word({8'hE5, 8'd1, 16'h0});
    send_word(32'h0);
    wait_idle();
    send(OP_SET_CURRENT, 16'h0042);
    wait_idle();
    check(isrc_code == 16'h0042, "commands run after an unknown opcode");

    // ---- uplink overflow: 17 full reads with the PC side not reading ----
    begin
      int c0 [8];
      for (int c = 0; c < 8; c++) c0[c] = conversions[c];
      ul_ready = 0;
      for (int r = 0; r < 17; r++) send(OP_READ, 16'h0, 32'hFFFF_FFFF, 32'hFFFF_FFFF, 2);
      repeat (2000) @(negedge clk);
      check(ul_level == 1025, $sformatf("uplink holds %0d words", ul_level));
      check(dut.u_ctrl.res_valid && !dut.u_ctrl.res_ready, "read stalled by full uplink");
      n_overflow++;
      for (int r = 0; r < 17; r++)
        for (int ch = 0; ch < 64; ch++) begin
          get_word(w);
          check(w[31:26] == 6'(ch) && $signed(w[17:0]) == $signed(18'(base[ch/8][ch%8] + 18'(c0[ch/8] + r))),
                $sformatf("overflow read %0d ch %0d", r, ch));
        end
      wait_idle();
      check(ul_level == 0, "uplink drained");
    end

    // ---- mechanism coverage ----
    check(n_cfg > 0, "channel configuration");
    check(n_dac > 0, "DAC write");
    check(n_read > 0, "averaged read");
    check(n_mask > 0, "masked read");
    check(n_pulse > 0, "pulse");
    check(n_async > 0, "asynchronous pulses in two clusters");
    check(n_pulse_wait > 0, "pulse stalled behind a busy cluster");
    check(n_clamp > 0, "minimum pulse width");
    check(n_isrc > 0, "current source");
    check(n_sel > 0 && n_sel_skip > 0, "selector write and skip");
    check(n_logic_w > 0 && n_logic_r > 0, "logic bank");
    check(n_bad > 0, "unknown opcode");
    check(n_dl_stall > 0, "downlink back-pressure");
    check(n_ul_stall > 0 && n_overflow > 0, "uplink overflow");
    $display("mechanisms: cfg=%0d dac=%0d read=%0d mask=%0d pulse=%0d async=%0d pulse_wait=%0d clamp=%0d isrc=%0d sel=%0d skip=%0d logic_w=%0d logic_r=%0d bad=%0d dl_stall=%0d ul_stall=%0d overflow=%0d",
             n_cfg, n_dac, n_read, n_mask, n_pulse, n_async, n_pulse_wait, n_clamp, n_isrc, n_sel, n_sel_skip,
             n_logic_w, n_logic_r, n_bad, n_dl_stall, n_ul_stall, n_overflow);
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
