// cluster_ctrl: the digital side of one cluster of eight SMU channels.
//
// A cluster shares one switch daisy chain, one 16-channel 16-bit DAC, one
// 8-channel 18-bit simultaneous-sampling ADC and one set of high-speed driver
// controls.  This block owns the four engines for them:
//  * switch chain: the eight channel configurations are decoded into switch
//    vectors and shifted out as one CH_PER_CLUSTER*SW_BITS-bit frame, channel 7
//    first, so that channel 0's bits end in the device nearest the FPGA.  The
//    chain latches on the rising edge of `sw_cs_n`.
//  * DAC: a 24-bit frame {DAC_CMD_WRITE, address, code}.  Address 2k is DAC+
//    (TIA reference / pulse level) and 2k+1 is DAC- (second driver level) of
//    channel k.
//  * ADC: `adc_convst` high for CONV_CYCLES, then wait for `adc_busy` low, then
//    read 8 x 18 bits (channel 0 first) on `adc_sdi`.  `adc_codes` keeps the
//    last reading until the next one.
//  * pulse: one pulse_gen, shared by all channels of the cluster in pulse mode.
// Each `*_start` is a one-cycle request accepted only while the engine is idle
// (`*_busy` low); `*_done` pulses once when the engine finishes.  Frame layouts
// and the ADC handshake are this design's assumptions about parts the paper does
// not name.
module cluster_ctrl
  import arc_pkg::*;
#(
  parameter int unsigned HALF_DIV    = 2,
  parameter int unsigned CONV_CYCLES = 2
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  ch_cfg_t [CH_PER_CLUSTER-1:0]         cfg,
  // switch chain
  input  logic                                 sw_start,
  output logic                                 sw_busy,
  output logic                                 sw_done,
  output logic                                 sw_sclk,
  output logic                                 sw_sdo,
  output logic                                 sw_cs_n,
  // DAC
  input  logic                                 dac_start,
  input  logic [$clog2(DACS_PER_CLUSTER)-1:0]   dac_addr,
  input  logic [DAC_BITS-1:0]                  dac_code,
  output logic                                 dac_busy,
  output logic                                 dac_done,
  output logic                                 dac_sclk,
  output logic                                 dac_sdo,
  output logic                                 dac_cs_n,
  // ADC
  input  logic                                 adc_start,
  output logic                                 adc_run,
  output logic                                 adc_done,
  output logic [CH_PER_CLUSTER-1:0][ADC_BITS-1:0] adc_codes,
  output logic                                 adc_convst,
  input  logic                                 adc_busy,
  output logic                                 adc_sclk,
  output logic                                 adc_cs_n,
  input  logic                                 adc_sdi,
  // high-speed driver
  input  logic                                 pulse_start,
  input  logic [15:0]                          pulse_width,
  input  logic [15:0]                          pulse_gap,
  input  logic [15:0]                          pulse_count,
  output logic                                 pulse_busy,
  output logic                                 hs_drive
);

  localparam int unsigned SW_FRAME  = CH_PER_CLUSTER * SW_BITS;
  localparam int unsigned ADC_FRAME = CH_PER_CLUSTER * ADC_BITS;

  // ---------------- switch chain ----------------
  sw_vec_t [CH_PER_CLUSTER-1:0] sw_vec;
  logic    [SW_FRAME-1:0]       sw_frame;
  logic    [SW_FRAME-1:0]       sw_rx_unused;

  for (genvar k = 0; k < CH_PER_CLUSTER; k++) begin : g_dec
    channel_switch_decoder u_dec (.cfg(cfg[k]), .sw(sw_vec[k]));
  end
  assign sw_frame = sw_vec;   // element 7 in the MSBs: shifted out first

  serial_shifter #(.WIDTH(SW_FRAME), .HALF_DIV(HALF_DIV)) u_sw (
    .clk, .rst_n, .start(sw_start), .tx_data(sw_frame), .busy(sw_busy),
    .done(sw_done), .rx_data(sw_rx_unused), .sclk(sw_sclk), .sdo(sw_sdo),
    .cs_n(sw_cs_n), .sdi(1'b0));

  // ---------------- DAC ----------------
  logic [DAC_FRAME_BITS-1:0] dac_rx_unused;

  serial_shifter #(.WIDTH(DAC_FRAME_BITS), .HALF_DIV(HALF_DIV)) u_dac (
    .clk, .rst_n, .start(dac_start), .tx_data({DAC_CMD_WRITE, dac_addr, dac_code}),
    .busy(dac_busy), .done(dac_done), .rx_data(dac_rx_unused), .sclk(dac_sclk),
    .sdo(dac_sdo), .cs_n(dac_cs_n), .sdi(1'b0));

  // ---------------- ADC ----------------
  typedef enum logic [1:0] {A_IDLE, A_CONV, A_WAIT, A_READ} adc_state_e;
  adc_state_e           a_state;
  logic [3:0]           a_cnt;
  logic                 rd_start, rd_busy, rd_done;
  logic [ADC_FRAME-1:0] rd_data;
  logic                 rd_sdo_unused;

  serial_shifter #(.WIDTH(ADC_FRAME), .HALF_DIV(HALF_DIV)) u_adc (
    .clk, .rst_n, .start(rd_start), .tx_data('0), .busy(rd_busy), .done(rd_done),
    .rx_data(rd_data), .sclk(adc_sclk), .sdo(rd_sdo_unused), .cs_n(adc_cs_n),
    .sdi(adc_sdi));

  assign adc_run    = (a_state != A_IDLE);
  assign adc_convst = (a_state == A_CONV);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_state   <= A_IDLE;
      a_cnt     <= '0;
      rd_start  <= 1'b0;
      adc_done  <= 1'b0;
      adc_codes <= '0;
    end else begin
      rd_start <= 1'b0;
      adc_done <= 1'b0;
      unique case (a_state)
        A_IDLE: if (adc_start) begin
          a_state <= A_CONV;
          a_cnt   <= '0;
        end
        A_CONV: begin
          a_cnt <= a_cnt + 1'b1;
          if (a_cnt == 4'(CONV_CYCLES - 1)) begin
            a_state <= A_WAIT;
            a_cnt   <= '0;
          end
        end
        // give BUSY a few cycles to rise, then wait for the end of conversion
        A_WAIT: begin
          if (a_cnt != 4'd3) a_cnt <= a_cnt + 1'b1;
          else if (!adc_busy) begin
            rd_start <= 1'b1;
            a_state  <= A_READ;
          end
        end
        A_READ: if (rd_done) begin
          for (int k = 0; k < int'(CH_PER_CLUSTER); k++)
            adc_codes[k] <= rd_data[ADC_FRAME-1-k*ADC_BITS -: ADC_BITS];
          adc_done <= 1'b1;
          a_state  <= A_IDLE;
        end
        default: a_state <= A_IDLE;
      endcase
    end
  end

  // ---------------- high-speed driver ----------------
  pulse_gen #(.CW(16), .MIN_CYCLES(MIN_PULSE_CYCLES)) u_pulse (
    .clk, .rst_n, .start(pulse_start), .width(pulse_width), .gap(pulse_gap),
    .count(pulse_count), .busy(pulse_busy), .hs_drive);

  assert property (@(posedge clk) disable iff (!rst_n) adc_start |-> !adc_run);

endmodule
