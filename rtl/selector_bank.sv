// selector_bank: driver of the 32-output 'selector' bank.
//
// The selector outputs (gates of 1T1R selector transistors) are set through a
// serial register chain: `start` with a new 32-bit state shifts it out MSB first
// (output 31 first) and the chain takes it on the rising edge of `cs_n`.  The
// state last sent is kept in `state`, so a write that changes nothing is skipped
// (`done` pulses the next cycle).  With HALF_DIV = 2 a write takes 131 cycles,
// the 1.3 us minimum selector pulse length the instrument reports.  The HI and
// LO voltages of the bank are analogue (set by DACs) and not handled here.
module selector_bank
  import arc_pkg::*;
#(
  parameter int unsigned HALF_DIV = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [SEL_PINS-1:0] new_state,
  output logic                busy,
  output logic                done,
  output logic [SEL_PINS-1:0] state,
  output logic                sclk,
  output logic                sdo,
  output logic                cs_n
);

  logic                sh_start, sh_busy, sh_done, skip_q;
  logic [SEL_PINS-1:0] rx_unused;

  assign sh_start = start && !busy && (new_state != state);
  assign busy     = sh_busy || skip_q;
  assign done     = sh_done || skip_q;

  serial_shifter #(.WIDTH(SEL_PINS), .HALF_DIV(HALF_DIV)) u_sh (
    .clk, .rst_n, .start(sh_start), .tx_data(new_state), .busy(sh_busy),
    .done(sh_done), .rx_data(rx_unused), .sclk, .sdo, .cs_n, .sdi(1'b0));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= '0;
      skip_q <= 1'b0;
    end else begin
      skip_q <= start && !busy && (new_state == state);
      if (sh_start) state <= new_state;
    end
  end

endmodule
