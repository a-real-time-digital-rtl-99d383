// fft_r2sdf: streaming NFFT-point complex FFT, one sample per clock.
//
// log2(NFFT) radix-2 delay-feedback stages with spans NFFT, NFFT/2, .., 2
// (see fft_r2sdf_stage). Every stage halves its butterfly outputs, so the
// output is X[k] / NFFT with X[k] = sum_n x[n] exp(-j*2*pi*n*k/NFFT), and no
// stage can overflow for inputs of magnitude below full scale. Bins leave in bit-reversed order; out_idx carries the
// natural bin index of each output. Input frames are counted from reset:
// samples 0..NFFT-1 after reset form the first frame. The first bin of a
// frame leaves NFFT+log2(NFFT)-2 clock edges after the frame's first sample when
// the input is continuous.
// The FFT length and the scaling by 2 in each stage are the paper's; the
// paper used a library "biplex" FFT core, whose insides it does not give,
// and the R2SDF pipeline here is this design's replacement for it.
module fft_r2sdf #(
  parameter int NFFT = 4096,
  parameter int W    = 18,
  parameter int TW_W = 18
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic signed [W-1:0]      in_re,
  input  logic signed [W-1:0]      in_im,
  input  logic                     in_valid,
  output logic signed [W-1:0]      out_re,
  output logic signed [W-1:0]      out_im,
  output logic [$clog2(NFFT)-1:0]  out_idx,
  output logic                     out_valid
);
  localparam int S = $clog2(NFFT);

  logic signed [W-1:0] re [S+1];
  logic signed [W-1:0] im [S+1];
  logic                v  [S+1];
  logic [S-1:0]        ocnt;

  always_comb begin
    re[0] = in_re;
    im[0] = in_im;
    v[0]  = in_valid;
  end

  for (genvar s = 0; s < S; s++) begin : g_stage
    fft_r2sdf_stage #(.L(NFFT >> (s+1)), .W(W), .TW_W(TW_W)) u_stage (
      .clk, .rst,
      .in_re(re[s]), .in_im(im[s]), .in_valid(v[s]),
      .out_re(re[s+1]), .out_im(im[s+1]), .out_valid(v[s+1])
    );
  end

  always_comb begin
    out_re    = re[S];
    out_im    = im[S];
    out_valid = v[S];
    for (int b = 0; b < S; b++) out_idx[b] = ocnt[S-1-b];
  end

  always_ff @(posedge clk) begin
    if (rst)       ocnt <= '0;
    else if (v[S]) ocnt <= ocnt + 1'b1;
  end
endmodule
