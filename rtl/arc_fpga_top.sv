// arc_fpga_top: FPGA digital interface of the 64-channel source-meter instrument.
//
// Data path (left to right in the interface hierarchy): USB 3.0 core -> downlink
// FIFO (one instruction package) -> transmission layer (package decoding) ->
// control layer (execution on the periphery); results go back control layer ->
// transmission layer -> uplink block memory -> USB 3.0 core.  The USB 3.0 core
// is third-party IP and lies outside this module: its 32-bit valid/ready streams
// (`dl_*` towards the instrument, `ul_*` towards the PC) are the top's ports, and
// at the 100 MHz system clock each carries up to 3.2 Gb/s.  The remaining ports
// are the serial trunk (switch chain, DAC and ADC lines of the eight clusters),
// the eight high-speed driver controls, the selector-bank serial line, the
// 32-pin logic bank and the shared current-source code.  All signals are
// synchronous to `clk`; `rst_n` is an asynchronous active-low reset.
module arc_fpga_top
  import arc_pkg::*;
#(
  parameter int unsigned UL_DEPTH    = 1024,
  parameter int unsigned HALF_DIV    = 2,
  parameter int unsigned CONV_CYCLES = 2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // USB core, downlink
  input  logic [WORD_BITS-1:0]       dl_data,
  input  logic                       dl_valid,
  output logic                       dl_ready,
  // USB core, uplink
  output logic [WORD_BITS-1:0]       ul_data,
  output logic                       ul_valid,
  input  logic                       ul_ready,
  output logic [$clog2(UL_DEPTH+2)-1:0] ul_level,
  // serial trunk
  output logic [NUM_CLUSTERS-1:0]    sw_sclk,
  output logic [NUM_CLUSTERS-1:0]    sw_sdo,
  output logic [NUM_CLUSTERS-1:0]    sw_cs_n,
  output logic [NUM_CLUSTERS-1:0]    dac_sclk,
  output logic [NUM_CLUSTERS-1:0]    dac_sdo,
  output logic [NUM_CLUSTERS-1:0]    dac_cs_n,
  output logic [NUM_CLUSTERS-1:0]    adc_convst,
  input  logic [NUM_CLUSTERS-1:0]    adc_busy,
  output logic [NUM_CLUSTERS-1:0]    adc_sclk,
  output logic [NUM_CLUSTERS-1:0]    adc_cs_n,
  input  logic [NUM_CLUSTERS-1:0]    adc_sdi,
  output logic [NUM_CLUSTERS-1:0]    hs_drive,
  // selector bank
  output logic                       sel_sclk,
  output logic                       sel_sdo,
  output logic                       sel_cs_n,
  // arbitrary logic bank
  output logic [LOGIC_PINS-1:0]      logic_o,
  output logic [LOGIC_PINS-1:0]      logic_oe,
  input  logic [LOGIC_PINS-1:0]      logic_i,
  // shared current source
  output logic [15:0]                isrc_code,
  output logic                       isrc_load,
  // status
  output logic                       bad_cmd,
  output logic                       pulse_wait
);

  logic [WORD_BITS-1:0] f_data, r_data, u_data;
  logic                 f_valid, f_ready, r_valid, r_ready, u_valid, u_ready;
  cmd_t                 cmd;
  logic                 cmd_valid, cmd_ready;

  cmd_fifo u_fifo (
    .clk, .rst_n, .s_data(dl_data), .s_valid(dl_valid), .s_ready(dl_ready),
    .m_data(f_data), .m_valid(f_valid), .m_ready(f_ready));

  transmission_layer u_tx (
    .clk, .rst_n, .dl_data(f_data), .dl_valid(f_valid), .dl_ready(f_ready),
    .cmd, .cmd_valid, .cmd_ready,
    .res_data(r_data), .res_valid(r_valid), .res_ready(r_ready),
    .ul_data(u_data), .ul_valid(u_valid), .ul_ready(u_ready), .bad_cmd);

  control_layer #(.HALF_DIV(HALF_DIV), .CONV_CYCLES(CONV_CYCLES)) u_ctrl (
    .clk, .rst_n, .cmd, .cmd_valid, .cmd_ready,
    .res_data(r_data), .res_valid(r_valid), .res_ready(r_ready),
    .sw_sclk, .sw_sdo, .sw_cs_n, .dac_sclk, .dac_sdo, .dac_cs_n,
    .adc_convst, .adc_busy, .adc_sclk, .adc_cs_n, .adc_sdi, .hs_drive,
    .sel_sclk, .sel_sdo, .sel_cs_n, .logic_o, .logic_oe, .logic_i,
    .isrc_code, .isrc_load, .pulse_wait);

  uplink_ram #(.DEPTH(UL_DEPTH)) u_ul (
    .clk, .rst_n, .s_data(u_data), .s_valid(u_valid), .s_ready(u_ready),
    .m_data(ul_data), .m_valid(ul_valid), .m_ready(ul_ready), .level(ul_level));

endmodule
