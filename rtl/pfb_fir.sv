// pfb_fir: polyphase filter bank front end (TAPS taps, NFFT branches).
//
// For input sample n with branch p = n mod NFFT the output is
//   y[n] = sum_{t=0}^{TAPS-1} h[(TAPS-1-t)*NFFT + p] * x[n - t*NFFT]
// so each of the NFFT FFT inputs sees a TAPS-tap FIR. The TAPS-1 older
// samples of every branch sit in TAPS-1 delay memories of NFFT words that
// share one address pointer. h is a Hamming-windowed sinc spanning
// TAPS*NFFT points with its main lobe one FFT bin wide, computed at time
// zero by an initial block (a ROM initialisation) and stored with 2**(COEF_W-2) meaning 1.0.
// Input: 14-bit 2's complement (Q1.13), one sample per in_valid. Output:
// 18-bit Q1.17 (saturated), one clock after the input.
// The 8 taps, the 4096 branches and the 18-bit output with 17 fraction bits
// are the paper's; the window and the coefficient format are this design's.
module pfb_fir #(
  parameter int TAPS   = 8,
  parameter int NFFT   = 4096,
  parameter int IN_W   = 14,
  parameter int OUT_W  = 18,
  parameter int COEF_W = 18
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic signed [IN_W-1:0]  in_data,
  input  logic                    in_valid,
  output logic signed [OUT_W-1:0] out_data,
  output logic                    out_valid
);
  localparam int  AW    = $clog2(NFFT);
  localparam int  M     = TAPS * NFFT;
  localparam int  ACC_W = IN_W + COEF_W + $clog2(TAPS) + 1;
  // x is Q1.(IN_W-1), h is Q2.(COEF_W-2), y is Q1.(OUT_W-1)
  localparam int  SHIFT = (IN_W - 1) + (COEF_W - 2) - (OUT_W - 1);
  localparam real PI    = 3.14159265358979323846;

  logic signed [IN_W-1:0]   dl   [TAPS-1][NFFT];
  logic signed [IN_W-1:0]   xt   [TAPS];     // x[n - t*NFFT]
  logic [AW-1:0]            ptr;
  logic signed [ACC_W-1:0]  acc, shifted;

  // Hamming-windowed sinc, main lobe one branch spacing wide, rounded.
  // Filled at time zero (a ROM initialisation); a constant-function table
  // of this size is too heavy for some tools.
  logic signed [COEF_W-1:0] coef [M];

  initial begin : design_coefs
    real c, u, sn, w, r;
    c = (M - 1) / 2.0;
    for (int i = 0; i < M; i++) begin
      u  = (i - c) / NFFT;
      sn = (u == 0.0) ? 1.0 : $sin(PI * u) / (PI * u);
      w  = 0.54 - 0.46 * $cos(2.0 * PI * i / (M - 1));
      r  = sn * w * (2.0 ** (COEF_W - 2));
      coef[i] = COEF_W'($rtoi(r < 0.0 ? r - 0.5 : r + 0.5));
    end
  end

  always_comb begin
    xt[0] = in_data;
    for (int t = 1; t < TAPS; t++) xt[t] = dl[t-1][ptr];
    acc = '0;
    for (int t = 0; t < TAPS; t++)
      acc = acc + ACC_W'(xt[t] * coef[(TAPS-1-t)*NFFT + int'(ptr)]);
    shifted = acc >>> SHIFT;
  end

  always_ff @(posedge clk) begin
    if (in_valid)
      for (int t = 0; t < TAPS-1; t++) dl[t][ptr] <= xt[t];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ptr       <= '0;
      out_data  <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        ptr <= ptr + 1'b1;
        if (shifted > ACC_W'((1 << (OUT_W-1)) - 1))       out_data <= OUT_W'((1 << (OUT_W-1)) - 1);
        else if (shifted < -ACC_W'(1 << (OUT_W-1)))       out_data <= OUT_W'(-(1 << (OUT_W-1)));
        else                                              out_data <= OUT_W'(shifted);
      end
    end
  end
endmodule
