// tb_channel_switch_decoder: checks the switch states of every mode, feedback
// range and AC GND setting against a table written out bit by bit from the
// channel description.  Bit order of the expected vector:
// {ADC GND, HS CONNECT, AC GND, DC GND, RANGE CONNECT, R[2:0], BYPASS, CS CONNECT}.
module tb_channel_switch_decoder;
  import arc_pkg::*;
  ch_cfg_t cfg;
  sw_vec_t sw;
  int checks = 0, failures = 0;

  channel_switch_decoder dut (.cfg, .sw);

  function automatic logic [9:0] expect_sw(logic [2:0] mode, logic [2:0] r, logic ac);
    logic [9:0] e;
    case (mode)
      3'd1:    e = 10'b00_0_0_1_000_1_0;          // voltage source
      3'd2:    e = 10'b00_0_1_0_000_0_0;          // ground
      3'd3:    e = {5'b00_0_0_1, r, 2'b0_0};      // current meter
      3'd4:    e = 10'b10_0_0_0_000_0_0;          // voltage meter
      3'd5:    e = 10'b00_0_0_0_000_0_1;          // current source
      3'd6:    e = 10'b01_0_0_0_000_0_0;          // pulse
      default: e = '0;                            // float
    endcase
    e[7] = ac;
    return e;
  endfunction

  initial begin
    for (int m = 0; m < 8; m++)
      for (int r = 0; r < 8; r++)
        for (int a = 0; a < 2; a++) begin
          cfg = ch_cfg_t'({3'(m), 3'(r), 1'(a)});
          #1;
          checks++;
          if (sw !== expect_sw(3'(m), 3'(r), 1'(a))) begin
            failures++;
            $display("mode %0d range %0d ac %0d: got %b expected %b", m, r, a, sw, expect_sw(3'(m), 3'(r), 1'(a)));
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
