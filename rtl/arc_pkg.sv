// arc_pkg: sizes, command encodings and channel-configuration types shared by
// the digital interface of the 64-channel source-meter instrument.
//
// Numbers that the instrument description fixes: 8 clusters of 8 SMU channels,
// an 8-channel 18-bit ADC and a 16-channel 16-bit DAC per cluster, 32 selector
// outputs, 32 logic-bank pins, a 100 MHz system clock and a 32-bit internal data
// path (3.2 Gb/s at 100 MHz), a 40 ns minimum pulse (4 clock cycles) and an
// average of 32 readings per measurement.  Everything about the command
// encoding (opcodes, header layout, argument fields) is this design's own
// choice; the instrument description names the commands but gives no format.
package arc_pkg;

  localparam int unsigned NUM_CLUSTERS     = 8;
  localparam int unsigned CH_PER_CLUSTER   = 8;
  localparam int unsigned NUM_CH           = NUM_CLUSTERS * CH_PER_CLUSTER;  // 64
  localparam int unsigned ADC_BITS         = 18;
  localparam int unsigned DAC_BITS         = 16;
  localparam int unsigned DACS_PER_CLUSTER = 16;
  localparam int unsigned DAC_FRAME_BITS   = 24;   // 4-bit command, 4-bit address, 16-bit code
  localparam int unsigned SEL_PINS         = 32;
  localparam int unsigned LOGIC_PINS       = 32;
  localparam int unsigned WORD_BITS        = 32;
  localparam int unsigned SW_BITS          = 10;   // analogue switches per channel (channel diagram of the paper)
  localparam int unsigned MIN_PULSE_CYCLES = 4;    // 40 ns at 100 MHz
  localparam int unsigned MAX_PAYLOAD      = 2;    // payload words after the header
  localparam int unsigned MAX_PKG_WORDS    = 1 + MAX_PAYLOAD;
  localparam int unsigned MAX_AVG_LOG2     = 5;    // up to 32 averaged readings
  localparam logic [3:0]  DAC_CMD_WRITE    = 4'h3; // command nibble of a DAC frame

  // Header word of an instruction package: [31:24] opcode, [23:16] number of
  // payload words that follow, [15:0] argument.
  typedef enum logic [7:0] {
    OP_NOP         = 8'h00,
    OP_CFG_CH      = 8'h01,  // select channels (mask in payload) and set their mode (arg)
    OP_SET_DAC     = 8'h02,  // arg[6:4] cluster, arg[3:0] DAC channel, payload[0][15:0] code
    OP_READ        = 8'h03,  // arg[2:0] log2(readings to average), payload = channel mask
    OP_PULSE       = 8'h04,  // arg[7:0] cluster mask, payload[0] {gap,width}, payload[1] count
    OP_SET_CURRENT = 8'h05,  // arg = shared current source code
    OP_SET_SEL     = 8'h06,  // payload[0] = 32 selector states
    OP_SET_LOGIC   = 8'h07,  // payload[0] = logic outputs, payload[1] = output enables
    OP_READ_LOGIC  = 8'h08   // returns one word with the 32 logic-bank inputs
  } opcode_e;

  // Operating modes of one SMU channel (Section "Subsystem overview").
  typedef enum logic [2:0] {
    MODE_FLOAT   = 3'd0,  // every switch open
    MODE_VSOURCE = 3'd1,  // RANGE by-pass + RANGE CONNECT: DAC+ drives the line
    MODE_GROUND  = 3'd2,  // DC GND only
    MODE_IMETER  = 3'd3,  // RANGE CONNECT + selected feedback resistors (TIA)
    MODE_VMETER  = 3'd4,  // ADC GND: direct voltage reading at ADC-
    MODE_ISOURCE = 3'd5,  // CURRENT SOURCE CONNECT to the shared current source
    MODE_PULSE   = 3'd6   // HS CONNECT to the high-speed driver
  } ch_mode_e;

  // Configuration of one channel, as carried in arg[6:0] of OP_CFG_CH.
  // range_sel: bit 0 = 820 ohm, bit 1 = 110 kohm, bit 2 = 15 Mohm feedback resistor.
  typedef struct packed {
    ch_mode_e   mode;
    logic [2:0] range_sel;
    logic       ac_gnd;     // shunt capacitor, may be added in any mode
  } ch_cfg_t;

  // Switch vector of one channel, in the order shifted into the switch chain
  // (MSB first).  Names are those of the paper's channel diagram.
  typedef struct packed {
    logic       adc_gnd;
    logic       hs_connect;
    logic       ac_gnd;
    logic       dc_gnd;
    logic       range_connect;
    logic [2:0] range_r;        // feedback resistor switches
    logic       range_bypass;   // feedback by-pass switch
    logic       cs_connect;     // CURRENT SOURCE CONNECT
  } sw_vec_t;

  // One decoded instruction package.
  typedef struct packed {
    opcode_e                          op;
    logic [15:0]                      arg;
    logic [MAX_PAYLOAD-1:0][WORD_BITS-1:0] payload;
  } cmd_t;

endpackage
