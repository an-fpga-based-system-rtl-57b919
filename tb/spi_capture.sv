// spi_capture: behavioural receiver for one serial line of the test benches
// (stands in for a switch daisy chain, a DAC or the selector register).
// Bits are taken on the rising edge of `sclk` while `cs_n` is low; when `cs_n`
// rises the last W bits become `frame`, `nbits` says how many bits the frame
// had and `nframes` counts frames.  Not synthesizable.
module spi_capture #(
  parameter int W = 32
) (
  input  logic         sclk,
  input  logic         sdo,
  input  logic         cs_n,
  output logic [W-1:0] frame,
  output int           nbits,
  output int           nframes
);
  logic [W-1:0] sh;
  int           n;

  initial begin
    frame   = '0;
    nbits   = 0;
    nframes = 0;
    sh      = '0;
    n       = 0;
  end

  always @(negedge cs_n) begin
    sh = '0;
    n  = 0;
  end

  always @(posedge sclk) if (!cs_n) begin
    sh = {sh[W-2:0], sdo};
    n++;
  end

  // a rising cs_n with no clock edges since it fell (e.g. at reset) is no frame
  always @(posedge cs_n) if (n > 0) begin
    frame = sh;
    nbits = n;
    nframes++;
    n = 0;
  end
endmodule
