// adc_formatter: registers one ADC channel and converts it to 2's complement.
//
// The ADC delivers offset-binary codes (0 = most negative). Inverting the MSB
// gives the same value in 2's complement. One register stage, so the output
// follows the input by one clock. The conversion itself follows the paper;
// the offset-binary input code is this design's assumption.
module adc_formatter #(
  parameter int W = 14
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [W-1:0]        adc_raw,
  output logic signed [W-1:0] data
);
  always_ff @(posedge clk) begin
    if (rst) data <= '0;
    else     data <= {~adc_raw[W-1], adc_raw[W-2:0]};
  end
endmodule
