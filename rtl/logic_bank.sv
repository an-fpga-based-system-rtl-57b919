// logic_bank: the 32-pin 'arbitrary logic' bank, driven in parallel from FPGA
// pins through bidirectional level shifters.
//
// `load` (one cycle) sets the output values and per-pin output enables together;
// they appear on `pin_o`/`pin_oe` the next cycle.  The inputs `pin_i` come from
// the level shifters asynchronously and pass a two-flop synchroniser, so
// `in_sync` lags them by two cycles.  The tristate buffers themselves sit
// outside this block (one pad per pin).  Reset leaves all pins as inputs.
module logic_bank
  import arc_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load,
  input  logic [LOGIC_PINS-1:0] out_val,
  input  logic [LOGIC_PINS-1:0] out_en,
  output logic [LOGIC_PINS-1:0] pin_o,
  output logic [LOGIC_PINS-1:0] pin_oe,
  input  logic [LOGIC_PINS-1:0] pin_i,
  output logic [LOGIC_PINS-1:0] in_sync
);

  logic [LOGIC_PINS-1:0] meta_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pin_o   <= '0;
      pin_oe  <= '0;
      meta_q  <= '0;
      in_sync <= '0;
    end else begin
      if (load) begin
        pin_o  <= out_val;
        pin_oe <= out_en;
      end
      meta_q  <= pin_i;
      in_sync <= meta_q;
    end
  end

endmodule
