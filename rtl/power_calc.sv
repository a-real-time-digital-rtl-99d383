// power_calc: power of the positive-frequency FFT bins, A(v) * conj(A(v)).
//
// For every FFT output whose natural index k is below NFFT/2 the block
// emits re**2 + im**2 at full precision (2W+1 bits, unsigned) together with
// the channel number k. Bins NFFT/2..NFFT-1, the mirror image of a real
// input's spectrum, are dropped. One clock of latency.
// Keeping only the positive half and forming the power are the paper's;
// the full-precision output is this design's choice.
module power_calc #(
  parameter int NFFT = 4096,
  parameter int W    = 18
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic signed [W-1:0]       in_re,
  input  logic signed [W-1:0]       in_im,
  input  logic [$clog2(NFFT)-1:0]   in_idx,
  input  logic                      in_valid,
  output logic [2*W:0]              out_pow,
  output logic [$clog2(NFFT)-2:0]   out_chan,
  output logic                      out_valid
);
  localparam int S = $clog2(NFFT);
  logic signed [2*W-1:0] sq_re, sq_im;

  always_comb begin
    sq_re = in_re * in_re;
    sq_im = in_im * in_im;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_pow   <= '0;
      out_chan  <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && !in_idx[S-1];
      out_chan  <= in_idx[S-2:0];
      out_pow   <= (2*W+1)'(unsigned'(sq_re)) + (2*W+1)'(unsigned'(sq_im));
    end
  end
endmodule
