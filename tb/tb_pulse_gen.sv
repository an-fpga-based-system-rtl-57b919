// tb_pulse_gen: starts pulse trains with various widths, gaps and counts
// (including widths below the 4-cycle minimum and the 4+4-cycle 12.5 MHz train)
// and compares `hs_drive` and `busy` cycle by cycle with the expected waveform.
module tb_pulse_gen;
  logic clk = 0, rst_n = 0, start = 0, busy, hs;
  logic [15:0] width, gap, count;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pulse_gen dut (.clk, .rst_n, .start, .width, .gap, .count, .busy, .hs_drive(hs));

  task automatic run(int w, int g, int n);
    int we, ge, ne, len, bad;
    int exp_hs[$];
    we = (w < 4) ? 4 : w;
    ge = (g < 4) ? 4 : g;
    ne = (n == 0) ? 1 : n;
    for (int p = 0; p < ne; p++) begin
      repeat (we) exp_hs.push_back(1);
      if (p < ne - 1) repeat (ge) exp_hs.push_back(0);
    end
    len = exp_hs.size();
    repeat (4) exp_hs.push_back(0);
    width = 16'(w); gap = 16'(g); count = 16'(n);
    start = 1;
    @(negedge clk);
    start = 0;
    bad = 0;
    foreach (exp_hs[i]) begin
      if (hs !== 1'(exp_hs[i])) bad++;
      if (busy !== (i < len)) bad++;
      @(negedge clk);
    end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL w=%0d g=%0d n=%0d: %0d mismatching samples", w, g, n, bad);
    end
  endtask

  initial begin
    int periods, rise_prev, cyc;
    width = 0; gap = 0; count = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (hs || busy) failures++;
    run(4, 4, 1);
    run(1, 1, 1);    // raised to the 40 ns minimum
    run(16, 4, 1);   // 160 ns
    for (int w = 4; w <= 16; w++) run(w, 7, 2);   // 40..160 ns in 10 ns steps
    run(4, 4, 5);    // 12.5 MHz train
    run(5, 100, 3);
    run(9, 0, 0);
    for (int t = 0; t < 10; t++) run(1 + $urandom_range(0, 20), 1 + $urandom_range(0, 20), $urandom_range(0, 5));
    // repetition period of the fastest train: 8 cycles = 80 ns = 12.5 MHz
    width = 4; gap = 4; count = 4; start = 1;
    periods = 0; rise_prev = -1; cyc = 0;
    for (int i = 0; i < 40; i++) begin
      logic prev;
      prev = hs;
      @(negedge clk);
      start = 0;
      cyc++;
      if (!prev && hs) begin
        if (rise_prev >= 0) begin
          checks++;
          if (cyc - rise_prev != 8) begin failures++; $display("FAIL period %0d", cyc - rise_prev); end
          periods++;
        end
        rise_prev = cyc;
      end
    end
    checks++;
    if (periods != 3) begin failures++; $display("FAIL: %0d periods seen", periods); end
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
