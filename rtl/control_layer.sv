// control_layer: executes decoded instruction packages on the analogue periphery.
//
// It keeps the configuration of all 64 channels and drives eight cluster_ctrl
// blocks (switch chain, DAC, ADC and pulse driver of each cluster), the selector
// bank, the logic bank and the code of the shared current source.  One command
// is accepted at a time (`cmd_ready` is high only when idle):
//  * OP_CFG_CH   - channels set in the 64-bit mask take the mode in arg[6:0];
//                  then all eight switch chains are rewritten in parallel.
//  * OP_SET_DAC  - one 24-bit frame to the DAC of cluster arg[6:4].
//  * OP_READ     - all eight ADCs convert together 2^arg[2:0] times (at most
//                  32); the sums are averaged by an arithmetic shift and one
//                  word {channel[5:0], 8'b0, code[17:0]} is returned per channel
//                  in the mask, channel 0 first.  A full uplink stalls the read.
//  * OP_PULSE    - starts the pulse generators of the clusters in arg[7:0].  It
//                  waits (`pulse_wait`) while one of them is still pulsing, but
//                  does not wait for the pulse to end, so the next command runs
//                  during the pulse and other clusters can pulse asynchronously.
//  * OP_SET_CURRENT, OP_SET_SEL, OP_SET_LOGIC, OP_READ_LOGIC - current-source
//                  code, selector states, logic outputs/enables, logic inputs.
// After reset every channel is MODE_FLOAT and the all-open switch frame is sent
// once before the first command is taken.  The command set follows the paper's
// list (select channels, pulse, read, set current, digital pins); encodings,
// averaging in hardware and the stall rules are this design's choices.
module control_layer
  import arc_pkg::*;
#(
  parameter int unsigned HALF_DIV    = 2,
  parameter int unsigned CONV_CYCLES = 2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // commands from the transmission layer
  input  cmd_t                       cmd,
  input  logic                       cmd_valid,
  output logic                       cmd_ready,
  // results to the transmission layer
  output logic [WORD_BITS-1:0]       res_data,
  output logic                       res_valid,
  input  logic                       res_ready,
  // serial trunk, one line of each kind per cluster
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
  output logic                       pulse_wait
);

  localparam int unsigned ACC_BITS = ADC_BITS + MAX_AVG_LOG2;

  typedef enum logic [3:0] {
    C_SW_START, C_SW, C_IDLE, C_DAC_START, C_DAC, C_ADC_START, C_ADC,
    C_EMIT, C_PULSE, C_SEL_START, C_SEL, C_EMIT_LOGIC
  } state_e;

  state_e                                          state;
  cmd_t                                            cur;
  ch_cfg_t [NUM_CLUSTERS-1:0][CH_PER_CLUSTER-1:0]  cfg_q;
  logic    [NUM_CH-1:0]                            mask;
  logic signed [ACC_BITS-1:0]                      acc [NUM_CH];
  logic [2:0]                                      avg_log2;
  logic [MAX_AVG_LOG2:0]                           samp;
  logic [5:0]                                      ch_idx;

  // cluster engine handshakes
  logic [NUM_CLUSTERS-1:0] sw_start, sw_busy, sw_done;
  logic [NUM_CLUSTERS-1:0] dac_start, dac_busy, dac_done;
  logic [NUM_CLUSTERS-1:0] adc_start, adc_run, adc_done;
  logic [NUM_CLUSTERS-1:0] pulse_start, pulse_busy;
  logic [CH_PER_CLUSTER-1:0][ADC_BITS-1:0] adc_codes [NUM_CLUSTERS];
  logic [2:0]              dac_cl;
  logic [7:0]              pulse_cl;

  logic                  sel_start, sel_busy, sel_done;
  logic [SEL_PINS-1:0]   sel_state;
  logic                  logic_load;
  logic [LOGIC_PINS-1:0] logic_in;
  logic                  accept;

  assign cmd_ready  = (state == C_IDLE);
  assign accept     = cmd_valid && cmd_ready;
  assign dac_cl     = cur.arg[6:4];
  assign pulse_cl   = cur.arg[7:0];
  assign pulse_wait = (state == C_PULSE) && ((pulse_cl & pulse_busy) != '0);

  always_comb begin
    sw_start    = (state == C_SW_START)  ? '1 : '0;
    adc_start   = (state == C_ADC_START) ? '1 : '0;
    dac_start   = '0;
    dac_start[dac_cl] = (state == C_DAC_START);
    pulse_start = (state == C_PULSE && !pulse_wait) ? pulse_cl : '0;
    sel_start   = (state == C_SEL_START);
    logic_load  = accept && (cmd.op == OP_SET_LOGIC);
  end

  // result words
  logic signed [ACC_BITS-1:0] avg;
  assign avg = acc[ch_idx] >>> avg_log2;

  always_comb begin
    res_valid = 1'b0;
    res_data  = '0;
    if (state == C_EMIT && mask[ch_idx]) begin
      res_valid = 1'b1;
      res_data  = {ch_idx, 8'h00, avg[ADC_BITS-1:0]};
    end else if (state == C_EMIT_LOGIC) begin
      res_valid = 1'b1;
      res_data  = logic_in;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= C_SW_START;
      cur       <= '0;
      cfg_q     <= '0;
      mask      <= '0;
      avg_log2  <= '0;
      samp      <= '0;
      ch_idx    <= '0;
      isrc_code <= '0;
      isrc_load <= 1'b0;
      for (int i = 0; i < int'(NUM_CH); i++) acc[i] <= '0;
    end else begin
      isrc_load <= 1'b0;
      unique case (state)
        C_SW_START: state <= C_SW;
        C_SW:       if (sw_busy == '0) state <= C_IDLE;
        C_IDLE: if (accept) begin
          cur <= cmd;
          unique case (cmd.op)
            OP_CFG_CH: begin
              for (int c = 0; c < int'(NUM_CLUSTERS); c++)
                for (int k = 0; k < int'(CH_PER_CLUSTER); k++)
                  if ({cmd.payload[1], cmd.payload[0]}[c*CH_PER_CLUSTER+k])
                    cfg_q[c][k] <= ch_cfg_t'(cmd.arg[6:0]);
              state <= C_SW_START;
            end
            OP_SET_DAC: state <= C_DAC_START;
            OP_READ: begin
              mask     <= {cmd.payload[1], cmd.payload[0]};
              avg_log2 <= (cmd.arg[2:0] > 3'(MAX_AVG_LOG2)) ? 3'(MAX_AVG_LOG2) : cmd.arg[2:0];
              samp     <= '0;
              for (int i = 0; i < int'(NUM_CH); i++) acc[i] <= '0;
              state    <= C_ADC_START;
            end
            OP_PULSE:       state <= C_PULSE;
            OP_SET_CURRENT: begin
              isrc_code <= cmd.arg;
              isrc_load <= 1'b1;
            end
            OP_SET_SEL:     state <= C_SEL_START;
            OP_READ_LOGIC:  state <= C_EMIT_LOGIC;
            default: ;      // OP_NOP, OP_SET_LOGIC (done by logic_load)
          endcase
        end
        C_DAC_START: state <= C_DAC;
        C_DAC:       if (!dac_busy[dac_cl]) state <= C_IDLE;
        C_ADC_START: state <= C_ADC;
        C_ADC: if (adc_run == '0) begin
          for (int c = 0; c < int'(NUM_CLUSTERS); c++)
            for (int k = 0; k < int'(CH_PER_CLUSTER); k++)
              acc[c*CH_PER_CLUSTER+k] <= acc[c*CH_PER_CLUSTER+k]
                + ACC_BITS'(signed'(adc_codes[c][k]));
          if (samp == (MAX_AVG_LOG2+1)'((1 << avg_log2) - 1)) begin
            ch_idx <= '0;
            state  <= C_EMIT;
          end else begin
            samp  <= samp + 1'b1;
            state <= C_ADC_START;
          end
        end
        C_EMIT: if (!mask[ch_idx] || res_ready) begin
          ch_idx <= ch_idx + 1'b1;
          if (ch_idx == 6'(NUM_CH - 1)) state <= C_IDLE;
        end
        C_PULSE:      if (!pulse_wait) state <= C_IDLE;
        C_SEL_START:  state <= C_SEL;
        C_SEL:        if (!sel_busy) state <= C_IDLE;
        C_EMIT_LOGIC: if (res_ready) state <= C_IDLE;
        default:      state <= C_IDLE;
      endcase
    end
  end

  for (genvar c = 0; c < NUM_CLUSTERS; c++) begin : g_cl
    cluster_ctrl #(.HALF_DIV(HALF_DIV), .CONV_CYCLES(CONV_CYCLES)) u_cl (
      .clk, .rst_n,
      .cfg        (cfg_q[c]),
      .sw_start   (sw_start[c]),  .sw_busy(sw_busy[c]),   .sw_done(sw_done[c]),
      .sw_sclk    (sw_sclk[c]),   .sw_sdo(sw_sdo[c]),     .sw_cs_n(sw_cs_n[c]),
      .dac_start  (dac_start[c]), .dac_addr(cur.arg[3:0]), .dac_code(cur.payload[0][15:0]),
      .dac_busy   (dac_busy[c]),  .dac_done(dac_done[c]),
      .dac_sclk   (dac_sclk[c]),  .dac_sdo(dac_sdo[c]),   .dac_cs_n(dac_cs_n[c]),
      .adc_start  (adc_start[c]), .adc_run(adc_run[c]),   .adc_done(adc_done[c]),
      .adc_codes  (adc_codes[c]),
      .adc_convst (adc_convst[c]), .adc_busy(adc_busy[c]),
      .adc_sclk   (adc_sclk[c]),  .adc_cs_n(adc_cs_n[c]), .adc_sdi(adc_sdi[c]),
      .pulse_start(pulse_start[c]),
      .pulse_width(cur.payload[0][15:0]), .pulse_gap(cur.payload[0][31:16]),
      .pulse_count(cur.payload[1][15:0]),
      .pulse_busy (pulse_busy[c]), .hs_drive(hs_drive[c]));
  end

  selector_bank #(.HALF_DIV(HALF_DIV)) u_sel (
    .clk, .rst_n, .start(sel_start), .new_state(cur.payload[0]), .busy(sel_busy),
    .done(sel_done), .state(sel_state), .sclk(sel_sclk), .sdo(sel_sdo), .cs_n(sel_cs_n));

  logic_bank u_logic (
    .clk, .rst_n, .load(logic_load), .out_val(cmd.payload[0]), .out_en(cmd.payload[1]),
    .pin_o(logic_o), .pin_oe(logic_oe), .pin_i(logic_i), .in_sync(logic_in));

  assert property (@(posedge clk) disable iff (!rst_n)
                   res_valid && !res_ready |=> res_valid && $stable(res_data));

endmodule
