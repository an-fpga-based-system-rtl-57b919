// tb_iv_sweep: two-channel IV sweep of a 10 Mohm resistor from -2 V to +2 V in
// 4 mV steps (1001 points) through the whole FPGA interface at default sizes.
// Channel 0 is a voltage source whose level is its DAC+ (cluster 0, DAC address
// 0); channel 1 is a current meter on the 15 Mohm range.  Each point is one DAC
// write and one read of channel 1.  The stand-in analogue side turns the last
// DAC code into a voltage (16 bits over +-13.5 V) and the resistor current into
// a TIA output of I * 15 Mohm, read with 78.125 uV ADC codes.  The test checks
// every DAC frame and every reading, and that the resistance rebuilt from each
// point with |V| >= 0.1 V lies within 1 % of 10 Mohm.
// A second phase controls three channels at once, as for an nFET transfer
// curve: channel 2 (drain, DAC address 4) holds 1 V, channel 3 (gate, address
// 6) steps from 0 V to 4 V in 40 mV steps, and channel 4 (source, address 8 at
// 0 V) reads the drain current on the 820 ohm range.  The stand-in FET is a
// square-law device (threshold 2.1 V, k = 20 mA/V^2) whose current is clipped
// where the reading reaches full scale, as a saturating TIA would.  Each
// reading is checked, as are the threshold and the clipping.  The 40 mV step and
// the FET constants are this test's own; the sweep ranges are the paper's.
module tb_iv_sweep;
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

  localparam real VFS = 13.5, RDUT = 10.0e6, RF = 15.0e6, LSB = 78.125e-6;
  localparam real VT = 2.1, KN = 0.02, RF_LO = 820.0;

  logic [23:0] dac_frame;
  int dac_nbits, dac_nframes;
  spi_capture #(.W(24)) daccap (.sclk(dac_sclk[0]), .sdo(dac_sdo[0]), .cs_n(dac_cs_n[0]),
    .frame(dac_frame), .nbits(dac_nbits), .nframes(dac_nframes));

  function automatic real dac_volts(logic [15:0] code);
    return -VFS + 2.0 * VFS * real'(code) / 65535.0;
  endfunction
  // latest code written to each DAC address of cluster 0
  logic [15:0] dac_lvl [16];
  initial for (int a = 0; a < 16; a++) dac_lvl[a] = 16'd32768;
  always @(dac_nframes) dac_lvl[dac_frame[19:16]] = dac_frame[15:0];

  function automatic int fet_code(real vd, real vg, real vs);
    real vov, vds, id, c;
    vov = vg - vs - VT;
    vds = vd - vs;
    if (vov <= 0.0) id = 0.0;
    else if (vds >= vov) id = 0.5 * KN * vov * vov;
    else id = KN * (vov * vds - 0.5 * vds * vds);
    c = id * RF_LO / LSB;
    if (c > 131071.0) c = 131071.0;
    return $rtoi(c + 0.5);
  endfunction

  function automatic int tia_code(real v);
    return $rtoi(v / RDUT * RF / LSB + (v >= 0 ? 0.5 : -0.5));
  endfunction

  int conversions [8];
  logic [7:0][17:0] codes [8];
  for (genvar cl = 0; cl < 8; cl++) begin : g_m
    always_comb begin
      codes[cl] = '0;
      if (cl == 0) begin
        codes[cl][1] = 18'(tia_code(dac_volts(dac_lvl[0])));
        codes[cl][4] = 18'(fet_code(dac_volts(dac_lvl[4]), dac_volts(dac_lvl[6]), dac_volts(dac_lvl[8])));
      end
    end
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

  task automatic send(opcode_e op, logic [15:0] arg, logic [31:0] p0, logic [31:0] p1, int n);
    send_word({op, 8'(n), arg});
    if (n > 0) send_word(p0);
    if (n > 1) send_word(p1);
  endtask

  initial begin
    int bad_r, npts;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (200) @(negedge clk);
    send(OP_CFG_CH, {9'b0, MODE_VSOURCE, 3'b000, 1'b0}, 32'h1, 32'h0, 2);
    send(OP_CFG_CH, {9'b0, MODE_IMETER, 3'b100, 1'b0}, 32'h2, 32'h0, 2);
    bad_r = 0;
    npts = 0;
    for (int i = 0; i <= 1000; i++) begin
      real v, r;
      logic [15:0] code;
      int n, rd;
      v = -2.0 + 0.004 * i;
      code = 16'($rtoi((v + VFS) / (2.0 * VFS) * 65535.0 + 0.5));
      send(OP_SET_DAC, 16'h0000, {16'h0, code}, 32'h0, 1);
      send(OP_READ, 16'd0, 32'h2, 32'h0, 2);
      n = 0;
      while (!ul_valid && n < 100000) begin @(negedge clk); n++; end
      rd = int'($signed(ul_data[17:0]));
      check(dac_frame == {4'h3, 4'h0, code}, $sformatf("DAC frame %h at point %0d", dac_frame, i));
      check(ul_data[31:26] == 6'd1 && rd == tia_code(dac_volts(code)), $sformatf("point %0d read %0d", i, rd));
      if (v >= 0.1 || v <= -0.1) begin
        r = dac_volts(code) / (real'(rd) * LSB / RF);
        if (r < 0.99 * RDUT || r > 1.01 * RDUT) bad_r++;
        npts++;
      end
      @(negedge clk);
    end
    $display("%0d points with |V| >= 0.1 V, %0d outside 1 %% of 10 Mohm", npts, bad_r);
    check(bad_r == 0, "resistance within 1 %");
    check(dac_nframes == 1001, "one DAC frame per point");
    begin
      int off_pts, clip_pts, prev;
      send(OP_CFG_CH, {9'b0, MODE_VSOURCE, 3'b000, 1'b0}, 32'h0C, 32'h0, 2);
      send(OP_CFG_CH, {9'b0, MODE_IMETER, 3'b001, 1'b0}, 32'h10, 32'h0, 2);
      send(OP_SET_DAC, 16'h0004, {16'h0, 16'($rtoi((1.0 + VFS) / (2.0 * VFS) * 65535.0 + 0.5))}, 32'h0, 1);
      send(OP_SET_DAC, 16'h0008, 32'd32768, 32'h0, 1);
      off_pts = 0;
      clip_pts = 0;
      prev = -1;
      for (int i = 0; i <= 100; i++) begin
        logic [15:0] code;
        int n, rd, e;
        code = 16'($rtoi((0.04 * i + VFS) / (2.0 * VFS) * 65535.0 + 0.5));
        send(OP_SET_DAC, 16'h0006, {16'h0, code}, 32'h0, 1);
        send(OP_READ, 16'd0, 32'h10, 32'h0, 2);
        n = 0;
        while (!ul_valid && n < 100000) begin @(negedge clk); n++; end
        rd = int'($signed(ul_data[17:0]));
        e = fet_code(dac_volts(dac_lvl[4]), dac_volts(code), dac_volts(dac_lvl[8]));
        check(ul_data[31:26] == 6'd4 && rd == e, $sformatf("gate point %0d read %0d expected %0d", i, rd, e));
        check(rd >= prev, $sformatf("transfer curve not monotonic at %0d", i));
        prev = rd;
        if (rd == 0) off_pts++;
        if (rd == 131071) clip_pts++;
        @(negedge clk);
      end
      $display("FET transfer sweep: %0d points below threshold, %0d clipped", off_pts, clip_pts);
      check(off_pts == 53, "points at or below the 2.1 V threshold");
      check(clip_pts > 0 && clip_pts < 30, "some points clipped at full scale");
    end
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
