// mixer: LO select (the "dc-mode" multiplexer) followed by the multiplier.
//
// In IF mode the RF sample is multiplied by the LO sample from the second ADC
// channel, translating the band f_lo .. f_lo+625 kHz down to baseband. In
// baseband (dc) mode the LO is replaced by the constant 1.0, here the Q1.13
// value 8191, so the RF samples pass at the same scale as with a full-scale
// LO. The product is kept at full width (2W bits) and registered: one clock
// of latency. The multiplexer and multiplier are the paper's; the value used
// for 1.0 and the register are this design's choices.
module mixer #(
  parameter int W = 14
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  dc_mode,
  input  logic signed [W-1:0]   rf,
  input  logic signed [W-1:0]   lo,
  output logic signed [2*W-1:0] prod
);
  localparam logic signed [W-1:0] ONE = (W)'((1 << (W-1)) - 1);
  logic signed [W-1:0] lo_sel;

  always_comb lo_sel = dc_mode ? ONE : lo;

  always_ff @(posedge clk) begin
    if (rst) prod <= '0;
    else     prod <= rf * lo_sel;
  end
endmodule
