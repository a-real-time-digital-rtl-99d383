// fft_r2sdf_stage: one radix-2 single-path delay-feedback (R2SDF) stage,
// decimation in frequency, with span 2L.
//
// Per block of 2L input samples: the first L are stored in an L-word delay
// memory while the memory's previous contents (the differences of the last
// block) leave multiplied by the twiddle W_{2L}^n = exp(-j*2*pi*n/(2L)).
// During the second L samples the stored sample a and the input b form
// (a+b)/2, which leaves at once, and (a-b)/2, which goes back into the
// memory. Each butterfly output is halved, the per-stage scaling by 2 that
// keeps the FFT from overflowing: no value can leave the range as long as
// the input magnitude |re + j*im| stays below full scale, which a real
// input always does. The rotated value saturates, as a guard. The output is registered; a stage
// produces its first output after L inputs and then one per input.
// Twiddles are constant tables computed at elaboration with 2**(TW_W-2) meaning 1.0.
// This is a helper of fft_r2sdf.
module fft_r2sdf_stage #(
  parameter int L    = 2048,
  parameter int W    = 18,
  parameter int TW_W = 18
) (
  input  logic                clk,
  input  logic                rst,
  input  logic signed [W-1:0] in_re,
  input  logic signed [W-1:0] in_im,
  input  logic                in_valid,
  output logic signed [W-1:0] out_re,
  output logic signed [W-1:0] out_im,
  output logic                out_valid
);
  localparam int  CW = $clog2(2*L);
  localparam real PI = 3.14159265358979323846;

  typedef logic signed [TW_W-1:0] tw_t [L];

  // W_{2L}^n, n = 0..L-1: re = cos, im = -sin, rounded
  function automatic tw_t make_tw(input bit imag);
    tw_t t;
    real r;
    for (int n = 0; n < L; n++) begin
      r = (imag ? -$sin(2.0 * PI * n / (2.0 * L)) : $cos(2.0 * PI * n / (2.0 * L))) * (2.0 ** (TW_W - 2));
      t[n] = TW_W'($rtoi(r < 0.0 ? r - 0.5 : r + 0.5));
    end
    return t;
  endfunction

  localparam tw_t TW_RE = make_tw(1'b0);
  localparam tw_t TW_IM = make_tw(1'b1);

  logic signed [W-1:0]    dl_re [L];
  logic signed [W-1:0]    dl_im [L];
  logic [CW-1:0]          cnt;
  logic                   primed;
  int                     ptr;
  logic                   phase;
  logic signed [W-1:0]    a_re, a_im;
  logic signed [W:0]      sum_re, sum_im, dif_re, dif_im;
  logic signed [W+TW_W:0] m_re, m_im;
  logic signed [W-1:0]    r_re, r_im;

  // rotated value back to W bits, saturating
  function automatic logic signed [W-1:0] sat(input logic signed [W+TW_W:0] v);
    logic signed [W+TW_W:0] q;
    q = v >>> (TW_W - 2);
    if (q > (W+TW_W+1)'((1 << (W-1)) - 1)) return W'((1 << (W-1)) - 1);
    if (q < -(W+TW_W+1)'(1 << (W-1)))      return W'(-(1 << (W-1)));
    return W'(q);
  endfunction

  always_comb begin
    ptr    = int'(cnt) % L;
    phase  = cnt[CW-1];
    a_re   = dl_re[ptr];
    a_im   = dl_im[ptr];
    sum_re = (W+1)'(a_re) + (W+1)'(in_re);
    sum_im = (W+1)'(a_im) + (W+1)'(in_im);
    dif_re = (W+1)'(a_re) - (W+1)'(in_re);
    dif_im = (W+1)'(a_im) - (W+1)'(in_im);
    m_re   = (W+TW_W+1)'(a_re * TW_RE[ptr]) - (W+TW_W+1)'(a_im * TW_IM[ptr]);
    m_im   = (W+TW_W+1)'(a_re * TW_IM[ptr]) + (W+TW_W+1)'(a_im * TW_RE[ptr]);
    r_re   = sat(m_re);
    r_im   = sat(m_im);
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      if (!phase) begin
        dl_re[ptr] <= in_re;
        dl_im[ptr] <= in_im;
      end else begin
        dl_re[ptr] <= W'(dif_re >>> 1);
        dl_im[ptr] <= W'(dif_im >>> 1);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt       <= '0;
      primed    <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        cnt <= cnt + 1'b1;
        if (!phase) begin
          out_re    <= r_re;
          out_im    <= r_im;
          out_valid <= primed;
        end else begin
          out_re    <= W'(sum_re >>> 1);
          out_im    <= W'(sum_im >>> 1);
          out_valid <= 1'b1;
          primed    <= 1'b1;
        end
      end
    end
  end
endmodule
