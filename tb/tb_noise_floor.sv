// tb_noise_floor: 10,000 single readings of a grounded channel, as in a
// noise-floor measurement, through the whole FPGA interface at default sizes.
// The host writes all 10,000 READ packages back to back but does not read the
// uplink for the first 700,000 cycles, so the uplink memory fills to its 1025
// words and the control layer must stall (and through it the downlink) without
// losing or reordering a reading; afterwards the host drains at random.  The
// stand-in ADC returns a fixed pseudo-random sequence spread over three
// neighbouring codes (-1, 0, +1), so every reading and the final histogram can
// be checked exactly.  Also checked: the uplink reached full, the downlink
// was held off while it was full, and one conversion was made per reading.
module tb_noise_floor;
  import arc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [31:0] dl_data = 0, ul_data;
  logic dl_valid = 0, dl_ready, ul_valid, ul_ready = 0;
  logic [10:0] ul_level;
  logic [7:0] sw_sclk, sw_sdo, sw_cs_n, dac_sclk, dac_sdo, dac_cs_n;
  logic [7:0] adc_convst, adc_busy, adc_sclk, adc_cs_n, adc_sdi, hs_drive;
  logic sel_sclk, sel_sdo, sel_cs_n, isrc_load, bad_cmd, pulse_wait;
  logic [31:0] logic_o, logic_oe, logic_i = 0;
  logic [15:0] isrc_code;
  int checks = 0, failures = 0;

  localparam int N = 10000;

  always #5 clk = ~clk;

  arc_fpga_top dut (.*);

  // noise of conversion i: -1 with probability 0.2, +1 with 0.2, else 0
  function automatic int noise(int i);
    int unsigned h;
    h = (32'(i) + 32'd1) * 32'd2654435761;
    h = (h >> 13) % 10;
    return (h < 2) ? -1 : (h >= 8) ? 1 : 0;
  endfunction

  int conversions [8];
  logic [7:0][17:0] codes [8];
  for (genvar cl = 0; cl < 8; cl++) begin : g_m
    always_comb begin
      codes[cl] = '0;
      if (cl == 0) codes[cl][0] = 18'(noise(conversions[0]));
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

  // uplink statistics
  int max_level = 0, full_refused = 0, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && int'(ul_level) > max_level) max_level = int'(ul_level);
    if (ul_level == 11'd1025 && dl_valid && !dl_ready) full_refused++;
  end

  int got = 0, bad = 0;
  int hist [3] = '{0, 0, 0}, exp_hist [3] = '{0, 0, 0};

  // host reader: idle at first, then drain with random back-pressure
  initial begin
    wait (rst_n);
    while (cyc < 700000) @(negedge clk);
    while (got < N) begin
      @(negedge clk);
      ul_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (ul_valid && ul_ready) begin
        int v;
        v = int'($signed(ul_data[17:0]));
        if (ul_data[31:26] != 6'd0 || v != noise(got)) begin
          bad++;
          if (bad < 5) $display("reading %0d: %0d expected %0d", got, v, noise(got));
        end
        if (v >= -1 && v <= 1) hist[v + 1]++;
        got++;
      end
    end
    @(negedge clk);
    ul_ready = 0;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (200) @(negedge clk);
    send_word({OP_CFG_CH, 8'd2, 9'b0, MODE_GROUND, 3'b000, 1'b0});
    send_word(32'h1);
    send_word(32'h0);
    for (int i = 0; i < N; i++) begin
      send_word({OP_READ, 8'd2, 16'd0});
      send_word(32'h1);
      send_word(32'h0);
    end
    while (got < N) @(negedge clk);
    for (int i = 0; i < N; i++) exp_hist[noise(i) + 1]++;
    check(bad == 0, $sformatf("%0d readings wrong or out of order", bad));
    check(hist == exp_hist, "histogram");
    check(max_level == 1025, $sformatf("uplink reached %0d words", max_level));
    check(full_refused > 1000, $sformatf("downlink held off %0d cycles while the uplink was full", full_refused));
    check(conversions[0] == N, $sformatf("%0d conversions", conversions[0]));
    repeat (20) @(negedge clk);
    check(!ul_valid && ul_level == 0, "uplink empty at the end");
    $display("histogram -1/0/+1: %0d %0d %0d (expected %0d %0d %0d); uplink peak %0d words",
             hist[0], hist[1], hist[2], exp_hist[0], exp_hist[1], exp_hist[2], max_level);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired after %0d readings", got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
