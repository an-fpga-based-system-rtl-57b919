// uplink_ram: block-memory buffer for measurement results on their way to the PC.
//
// Results are written by the transmission layer and wait here until the USB core
// (and the PC behind it) is ready.  The store is a DEPTH x 32-bit array with one
// write and one synchronous read port, so it maps onto FPGA block RAM; a read is
// prefetched into an output register, which gives first-word-fall-through
// valid/ready behaviour and one extra word of capacity (DEPTH+1 in total).
// `level` counts the words held.  The paper gives no size; 1024 words (one
// 36-kbit block RAM) is this design's choice and holds sixteen 64-channel reads.
module uplink_ram
  import arc_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned W     = WORD_BITS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [W-1:0]             s_data,
  input  logic                     s_valid,
  output logic                     s_ready,
  output logic [W-1:0]             m_data,
  output logic                     m_valid,
  input  logic                     m_ready,
  output logic [$clog2(DEPTH+2)-1:0] level
);

  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned LW = $clog2(DEPTH + 2);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic [AW:0]   count;       // words in the array, not counting the output register
  logic          do_wr, do_rd;

  assign s_ready = (count < (AW+1)'(DEPTH));
  assign do_wr   = s_valid && s_ready;
  assign do_rd   = (count != '0) && (!m_valid || m_ready);
  assign level   = LW'(count) + LW'(m_valid);

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= s_data;
    if (do_rd) m_data    <= mem[rptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr    <= '0;
      rptr    <= '0;
      count   <= '0;
      m_valid <= 1'b0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
      if (do_rd)        m_valid <= 1'b1;
      else if (m_ready) m_valid <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   s_valid && !s_ready |=> s_valid && $stable(s_data));

endmodule
