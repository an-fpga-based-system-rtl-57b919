// adc_model: behavioural model of one cluster's 8-channel 18-bit simultaneous
// sampling ADC, as the test benches assume it behaves.  A rising `convst`
// samples `codes` and holds `busy` high for CONV clock cycles.  While `cs_n` is
// low the sampled codes are shifted out on `sdo`, channel 0 MSB first, a new bit
// after each falling `sclk` edge.  `conversions` counts conversions.
// Not synthesizable.
module adc_model #(
  parameter int CH   = 8,
  parameter int BITS = 18,
  parameter int CONV = 20
) (
  input  logic                     clk,
  input  logic                     convst,
  input  logic                     sclk,
  input  logic                     cs_n,
  input  logic [CH-1:0][BITS-1:0]  codes,
  output logic                     busy,
  output logic                     sdo,
  output int                       conversions
);
  logic [CH*BITS-1:0] sampled, sh;

  initial begin
    busy        = 1'b0;
    sdo         = 1'b0;
    conversions = 0;
    sampled     = '0;
    sh          = '0;
  end

  always @(posedge convst) begin
    for (int k = 0; k < CH; k++) sampled[(CH-k)*BITS-1 -: BITS] = codes[k];  // channel 0 first
    conversions++;
    busy = 1'b1;
    repeat (CONV) @(posedge clk);
    busy = 1'b0;
  end

  always @(negedge cs_n) begin
    sh  = sampled;
    sdo = sh[CH*BITS-1];
  end

  always @(negedge sclk) if (!cs_n) begin
    sh  = sh << 1;
    sdo = sh[CH*BITS-1];
  end
endmodule
