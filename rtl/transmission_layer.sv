// transmission_layer: turns the 32-bit word stream from the PC into decoded
// instruction packages for the control layer, and carries result words back.
//
// Downlink: a package is a header word ([31:24] opcode, [23:16] payload length,
// [15:0] argument) followed by that many payload words.  The layer collects the
// header and up to MAX_PAYLOAD payload words into a cmd_t and offers it to the
// control layer with `cmd_valid` until `cmd_ready`.  Payload words beyond
// MAX_PAYLOAD are read and dropped; an opcode this design does not know is
// executed as OP_NOP and flagged with a one-cycle `bad_cmd`.  The downlink is
// not read while a command waits, so the one-package FIFO in front of it
// applies back-pressure to the USB side.  Uplink: result words from the control
// layer pass to the uplink memory with their handshake unchanged.
// The package format is this design's own; the paper names the commands only.
module transmission_layer
  import arc_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // from the downlink FIFO
  input  logic [WORD_BITS-1:0] dl_data,
  input  logic                 dl_valid,
  output logic                 dl_ready,
  // to the control layer
  output cmd_t                 cmd,
  output logic                 cmd_valid,
  input  logic                 cmd_ready,
  // results from the control layer
  input  logic [WORD_BITS-1:0] res_data,
  input  logic                 res_valid,
  output logic                 res_ready,
  // to the uplink memory
  output logic [WORD_BITS-1:0] ul_data,
  output logic                 ul_valid,
  input  logic                 ul_ready,
  output logic                 bad_cmd
);

  typedef enum logic [1:0] {T_HDR, T_PAYLOAD, T_ISSUE} state_e;

  state_e     state;
  logic [7:0] left_q;   // payload words still to read
  logic [7:0] idx_q;    // payload words read so far
  cmd_t       cmd_q;

  function automatic logic known_op(logic [7:0] op);
    return op inside {OP_NOP, OP_CFG_CH, OP_SET_DAC, OP_READ, OP_PULSE,
                      OP_SET_CURRENT, OP_SET_SEL, OP_SET_LOGIC, OP_READ_LOGIC};
  endfunction

  assign dl_ready  = (state != T_ISSUE);
  assign cmd_valid = (state == T_ISSUE);
  assign cmd       = cmd_q;

  assign ul_data   = res_data;
  assign ul_valid  = res_valid;
  assign res_ready = ul_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= T_HDR;
      left_q  <= '0;
      idx_q   <= '0;
      cmd_q   <= '0;
      bad_cmd <= 1'b0;
    end else begin
      bad_cmd <= 1'b0;
      unique case (state)
        T_HDR: if (dl_valid) begin
          cmd_q.arg     <= dl_data[15:0];
          cmd_q.payload <= '0;
          if (known_op(dl_data[31:24])) begin
            cmd_q.op <= opcode_e'(dl_data[31:24]);
          end else begin
            cmd_q.op <= OP_NOP;
            bad_cmd  <= 1'b1;
          end
          left_q <= dl_data[23:16];
          idx_q  <= '0;
          state  <= (dl_data[23:16] == '0) ? T_ISSUE : T_PAYLOAD;
        end
        T_PAYLOAD: if (dl_valid) begin
          if (idx_q < 8'(MAX_PAYLOAD)) cmd_q.payload[idx_q[0]] <= dl_data;
          idx_q  <= idx_q + 1'b1;
          left_q <= left_q - 1'b1;
          if (left_q == 8'd1) state <= T_ISSUE;
        end
        T_ISSUE: if (cmd_ready) state <= T_HDR;
        default: state <= T_HDR;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd));

endmodule
