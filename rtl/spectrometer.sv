// spectrometer: the FFT spectrometer chain, polyphase filter bank -> FFT ->
// power -> integrator.
//
// A continuous stream of 14-bit samples (one per clock at 125 MSPS) is
// filtered by the TAPS-tap polyphase filter bank into 18-bit Q1.17 values,
// transformed by the NFFT-point FFT (real input on the real part), reduced
// to the powers of the NFFT/2 positive-frequency channels and summed over
// acc_len spectra. Each finished integration leaves as a 2048-word AXI
// stream (tvalid = dv, tdata = Pow_spec) in channel order; channel k is
// centred on k * 125 MHz / 4096 = k * 30.5 kHz.
// With continuous input a spectrum is produced every NFFT clocks, so an
// integration of acc_len spectra takes acc_len * 32.8 us (1000 spectra:
// about 32.8 ms). The chain is the paper's; see the sub-blocks for the
// details that are this design's own.
module spectrometer
  import drs_pkg::*;
#(
  parameter int NFFT      = 4096,
  parameter int TAPS      = 8,
  parameter int IN_W      = 14,
  parameter int W         = 18,
  parameter int POW_SHIFT = 6,
  parameter int LEN_W     = 32
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic signed [IN_W-1:0]  in_data,
  input  logic                    in_valid,
  input  logic [LEN_W-1:0]        acc_len,
  output axis_t                   m_axis,
  input  logic                    m_tready,
  output logic                    overrun,
  output logic [31:0]             spectra
);
  localparam int S = $clog2(NFFT);

  logic signed [W-1:0] pfb_d;
  logic                pfb_v;
  logic signed [W-1:0] f_re, f_im;
  logic [S-1:0]        f_idx;
  logic                f_v;
  logic [2*W:0]        p_pow;
  logic [S-2:0]        p_chan;
  logic                p_v;

  pfb_fir #(.TAPS(TAPS), .NFFT(NFFT), .IN_W(IN_W), .OUT_W(W)) u_pfb (
    .clk, .rst, .in_data, .in_valid, .out_data(pfb_d), .out_valid(pfb_v));

  fft_r2sdf #(.NFFT(NFFT), .W(W)) u_fft (
    .clk, .rst, .in_re(pfb_d), .in_im('0), .in_valid(pfb_v),
    .out_re(f_re), .out_im(f_im), .out_idx(f_idx), .out_valid(f_v));

  power_calc #(.NFFT(NFFT), .W(W)) u_pow (
    .clk, .rst, .in_re(f_re), .in_im(f_im), .in_idx(f_idx), .in_valid(f_v),
    .out_pow(p_pow), .out_chan(p_chan), .out_valid(p_v));

  vector_acc #(.NCHAN(NFFT/2), .IN_W(2*W+1), .POW_SHIFT(POW_SHIFT), .LEN_W(LEN_W)) u_acc (
    .clk, .rst, .in_pow(p_pow), .in_chan(p_chan), .in_valid(p_v), .acc_len,
    .m_axis, .m_tready, .overrun, .spectra);
endmodule
