// serial_shifter: frame-based serial master used for every serial line of the
// serial trunk (switch daisy chains, DACs, ADC read-out) and the selector bank.
//
// A one-cycle `start` loads `tx_data` and pulls `cs_n` low.  WIDTH bits are then
// shifted MSB first on `sdo`; each bit lasts 2*HALF_DIV clock cycles, with `sclk`
// low for the first half and high for the second.  `sdi` is sampled in the last
// cycle of the high half, so a device that updates its output on the falling
// edge is read correctly.  After the last bit `cs_n` stays high for HALF_DIV
// cycles (the latch/update edge of a daisy chain) before `done` pulses and
// `rx_data` holds the WIDTH bits read in, first bit in the MSB.
// Timing: `done` comes 2*HALF_DIV*WIDTH + HALF_DIV cycles after `start`.
// With HALF_DIV = 2 (25 MHz at 100 MHz) a 32-bit selector update takes 1.3 us,
// the minimum selector pulse the instrument reports.  The frame format and the
// clock rate are this design's choice; the paper only says the lines are serial.
module serial_shifter #(
  parameter int unsigned WIDTH    = 32,
  parameter int unsigned HALF_DIV = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [WIDTH-1:0] tx_data,
  output logic             busy,
  output logic             done,
  output logic [WIDTH-1:0] rx_data,
  output logic             sclk,
  output logic             sdo,
  output logic             cs_n,
  input  logic             sdi
);

  typedef enum logic [1:0] {S_IDLE, S_SHIFT, S_LATCH} state_e;

  localparam int unsigned PW = $clog2(2 * HALF_DIV);
  localparam int unsigned BW = (WIDTH > 1) ? $clog2(WIDTH) : 1;

  state_e           state;
  logic [PW-1:0]    phase;
  logic [BW-1:0]    bitcnt;
  logic [WIDTH-1:0] tx_sh;
  logic [WIDTH-1:0] rx_sh;

  assign busy    = (state != S_IDLE);
  assign sclk    = (state == S_SHIFT) && (phase >= PW'(HALF_DIV));
  assign sdo     = (state == S_SHIFT) ? tx_sh[WIDTH-1] : 1'b0;
  assign cs_n    = (state != S_SHIFT);
  assign rx_data = rx_sh;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      phase  <= '0;
      bitcnt <= '0;
      tx_sh  <= '0;
      rx_sh  <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          tx_sh  <= tx_data;
          phase  <= '0;
          bitcnt <= '0;
          state  <= S_SHIFT;
        end
        S_SHIFT: begin
          if (phase == PW'(2 * HALF_DIV - 1)) begin
            phase <= '0;
            rx_sh <= {rx_sh[WIDTH-2:0], sdi};
            tx_sh <= tx_sh << 1;
            if (bitcnt == BW'(WIDTH - 1)) state <= S_LATCH;
            else                          bitcnt <= bitcnt + 1'b1;
          end else begin
            phase <= phase + 1'b1;
          end
        end
        S_LATCH: begin
          if (phase == PW'(HALF_DIV - 1)) begin
            phase <= '0;
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            phase <= phase + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A start while a frame is running would be lost.
  assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE);

endmodule
