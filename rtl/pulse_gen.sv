// pulse_gen: timing of the high-speed pulse driver shared by one cluster.
//
// The driver is a complementary MOSFET pair that connects the line of every
// channel in pulse mode to one of two DAC levels; `hs_drive` selects the pulse
// level (1) or the base level (0).  A one-cycle `start` captures width, gap and
// count: the output then goes to the pulse level for `width` cycles, back to base
// for `gap` cycles, and so on for `count` pulses (0 counts as 1).  Width and gap
// are raised to MIN_CYCLES (40 ns at 100 MHz, the shortest pulse reported), so
// widths step in 10 ns and the fastest train is 4+4 cycles = 12.5 MHz, the
// highest repetition rate reported.  `hs_drive` rises the cycle after `start`;
// `busy` falls with the end of the last pulse.  Each cluster has one generator,
// so clusters pulse independently while channels of one cluster share a pulse.
module pulse_gen #(
  parameter int unsigned CW         = 16,
  parameter int unsigned MIN_CYCLES = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [CW-1:0] width,
  input  logic [CW-1:0] gap,
  input  logic [CW-1:0] count,
  output logic          busy,
  output logic          hs_drive
);

  logic [CW-1:0] w_q, g_q, left_q, tmr_q;
  logic          high_q;
  logic [CW-1:0] w_eff, g_eff;

  assign w_eff = (width < CW'(MIN_CYCLES)) ? CW'(MIN_CYCLES) : width;
  assign g_eff = (gap   < CW'(MIN_CYCLES)) ? CW'(MIN_CYCLES) : gap;
  assign hs_drive = busy && high_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      high_q <= 1'b0;
      w_q    <= '0;
      g_q    <= '0;
      left_q <= '0;
      tmr_q  <= '0;
    end else if (!busy) begin
      if (start) begin
        busy   <= 1'b1;
        high_q <= 1'b1;
        w_q    <= w_eff;
        g_q    <= g_eff;
        left_q <= (count == '0) ? CW'(1) : count;
        tmr_q  <= w_eff - 1'b1;
      end
    end else if (tmr_q != '0) begin
      tmr_q <= tmr_q - 1'b1;
    end else if (high_q) begin
      if (left_q == CW'(1)) begin
        busy   <= 1'b0;
        high_q <= 1'b0;
      end else begin
        high_q <= 1'b0;
        left_q <= left_q - 1'b1;
        tmr_q  <= g_q - 1'b1;
      end
    end else begin
      high_q <= 1'b1;
      tmr_q  <= w_q - 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
