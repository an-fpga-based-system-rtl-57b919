// cmd_fifo: downlink buffer between the USB 3.0 core and the transmission layer.
//
// A synchronous register FIFO of DEPTH 32-bit words with valid/ready
// (AXI4-Stream style) ports on both sides.  The instrument's FIFO holds exactly
// one instruction package, so DEPTH defaults to the longest package of this
// design's command format (header + 2 payload words = 3 words); the USB side is
// held off (`s_ready` low) while it is full.  Data written in one cycle is
// visible at `m_data` the next cycle.  Simultaneous read and write when full is
// allowed.
module cmd_fifo
  import arc_pkg::*;
#(
  parameter int unsigned DEPTH = MAX_PKG_WORDS,
  parameter int unsigned W     = WORD_BITS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] s_data,
  input  logic         s_valid,
  output logic         s_ready,
  output logic [W-1:0] m_data,
  output logic         m_valid,
  input  logic         m_ready
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic [AW:0]   count;
  logic          do_wr, do_rd;

  assign m_valid = (count != '0);
  assign m_data  = mem[rptr];
  assign s_ready = (count < (AW+1)'(DEPTH)) || m_ready;
  assign do_rd   = m_valid && m_ready;
  assign do_wr   = s_valid && s_ready;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_wr) wptr <= inc(wptr);
      if (do_rd) rptr <= inc(rptr);
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  always_ff @(posedge clk) if (do_wr) mem[wptr] <= s_data;

  // Stream rule: data offered must stay put until taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   s_valid && !s_ready |=> s_valid && $stable(s_data));

endmodule
