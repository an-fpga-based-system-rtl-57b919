// channel_switch_decoder: turns the operating mode of one SMU channel into the
// states of its ten analogue switches.
//
// The switch settings per mode follow the channel description: voltage source =
// RANGE by-pass and RANGE CONNECT closed, everything else open; ground = DC GND
// only; current meter = RANGE CONNECT plus the chosen feedback resistors; voltage
// meter = ADC GND closed.  The shunt capacitor (AC GND) may be added in any mode.
// Current-source mode (CURRENT SOURCE CONNECT only) and pulse mode (HS CONNECT
// only) are this design's reading of the paper's channel diagram, which shows those switches but does
// not list which others are open.  Purely combinational.
module channel_switch_decoder
  import arc_pkg::*;
(
  input  ch_cfg_t cfg,
  output sw_vec_t sw
);

  always_comb begin
    sw        = '0;
    sw.ac_gnd = cfg.ac_gnd;
    unique case (cfg.mode)
      MODE_VSOURCE: begin
        sw.range_bypass  = 1'b1;
        sw.range_connect = 1'b1;
      end
      MODE_GROUND:  sw.dc_gnd = 1'b1;
      MODE_IMETER: begin
        sw.range_connect = 1'b1;
        sw.range_r       = cfg.range_sel;
      end
      MODE_VMETER:  sw.adc_gnd    = 1'b1;
      MODE_ISOURCE: sw.cs_connect = 1'b1;
      MODE_PULSE:   sw.hs_connect = 1'b1;
      default: ;  // MODE_FLOAT and unused codes: all open
    endcase
  end

endmodule
