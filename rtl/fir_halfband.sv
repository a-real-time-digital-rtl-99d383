// fir_halfband: 256-tap CIC-compensating low-pass FIR, decimating by 2.
//
// Input: the 2.5 MSPS CIC output, one sample per in_valid (at least
// TAPS/LANES+1 clocks apart; at 125 MHz they are 50 clocks apart).
// Output: y[m] = sum_i h[i] * x[2m+1-i], one sample for every second input,
// i.e. 1.25 MSPS, covering 0..625 kHz.
//
// Coefficients are computed at elaboration from this recipe: the ideal
// response D(v) = 1 / |H_cic(v)| for 0 <= v < 1/4 (v in cycles per input
// sample, H_cic(v) = (sin(pi v) / (R sin(pi v / R)))**N) and 0 above, turned
// into an impulse response by numerical integration, multiplied by a Kaiser
// window (beta = 10) and scaled to unit gain at DC, then rounded to COEF_W
// bits with 2**(COEF_W-1) meaning 1.0.
//
// The sum is time-multiplexed: LANES multiply-accumulate units each walk
// TAPS/LANES taps, one tap per clock, then the lane sums are added. The
// output appears TAPS/LANES + 1 clocks after the clock edge that takes the
// input completing an input pair. The output keeps the input's scale: y = sum(h*x) >> (COEF_W-1).
// The tap count, window, beta, the compensation of the CIC droop and the
// rate halving are the paper's; the coefficient recipe above, the widths and
// the lane structure are this design's. With an even tap count the filter is
// a quarter-band low-pass rather than a half-band filter with zero taps.
module fir_halfband #(
  parameter int  TAPS    = 256,
  parameter int  LANES   = 8,
  parameter int  IN_W    = 24,
  parameter int  COEF_W  = 20,
  parameter int  OUT_W   = 32,
  parameter real BETA    = 10.0,
  parameter int  CIC_R   = 50,
  parameter int  CIC_N   = 3
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic signed [IN_W-1:0]  in_data,
  input  logic                    in_valid,
  output logic signed [OUT_W-1:0] out_data,
  output logic                    out_valid
);
  localparam int  K     = TAPS / LANES;            // taps per lane
  localparam int  ACC_W = IN_W + COEF_W + $clog2(TAPS);
  localparam real PI    = 3.14159265358979323846;

  logic signed [IN_W-1:0]   x    [TAPS];           // x[0] is the newest sample
  logic signed [ACC_W-1:0]  acc  [LANES];
  logic signed [ACC_W-1:0]  total;
  logic signed [IN_W+COEF_W-1:0] prod [LANES];
  logic [$clog2(K+1)-1:0]   step;
  logic                     busy, done, odd;

  // ---- coefficient design -------------------------------------------------
  function automatic real bessel_i0(input real v);
    real term, sum;
    term = 1.0; sum = 1.0;
    for (int k = 1; k < 40; k++) begin
      term = term * (v / (2.0 * k)) * (v / (2.0 * k));
      sum  = sum + term;
    end
    return sum;
  endfunction

  function automatic real cic_gain(input real v);
    real g;
    if (v == 0.0) return 1.0;
    g = $sin(PI * v) / (CIC_R * $sin(PI * v / CIC_R));
    return g ** CIC_N;
  endfunction

  typedef logic signed [COEF_W-1:0] coef_t [TAPS];

  function automatic coef_t make_coefs();
    coef_t t;
    real h [TAPS];
    real c, dv, v, sn, sum, w, r;
    c   = (TAPS - 1) / 2.0;
    dv  = 0.25 / 256;                              // 256 integration points
    sum = 0.0;
    for (int n = 0; n < TAPS; n++) begin
      sn = 0.0;
      for (int k = 0; k < 256; k++) begin
        v  = (k + 0.5) * dv;
        sn = sn + $cos(2.0 * PI * v * (n - c)) / cic_gain(v);
      end
      r = 2.0 * (n - c) / (TAPS - 1);
      w = bessel_i0(BETA * $sqrt(1.0 - r * r)) / bessel_i0(BETA);
      h[n] = 2.0 * sn * dv * w;
      sum  = sum + h[n];
    end
    for (int n = 0; n < TAPS; n++) begin
      r = h[n] / sum * (2.0 ** (COEF_W - 1));
      t[n] = COEF_W'($rtoi(r < 0.0 ? r - 0.5 : r + 0.5));
    end
    return t;
  endfunction

  localparam coef_t COEF = make_coefs();

  // ---- datapath ------------------------------------------------------------
  always_comb begin
    total = '0;
    for (int l = 0; l < LANES; l++) begin
      total   = total + acc[l];
      prod[l] = COEF[l*K + int'(step)] * x[l*K + int'(step)];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < TAPS; i++) x[i] <= '0;
      for (int l = 0; l < LANES; l++) acc[l] <= '0;
      step      <= '0;
      busy      <= 1'b0;
      done      <= 1'b0;
      odd       <= 1'b0;
      out_data  <= '0;
      out_valid <= 1'b0;
    end else begin
      done      <= 1'b0;
      out_valid <= 1'b0;
      if (in_valid) begin
        x[0] <= in_data;
        for (int i = 1; i < TAPS; i++) x[i] <= x[i-1];
        odd <= !odd;
        if (odd) begin                 // second sample of a pair: start a sum
          busy <= 1'b1;
          step <= '0;
          for (int l = 0; l < LANES; l++) acc[l] <= '0;
        end
      end else if (busy) begin
        for (int l = 0; l < LANES; l++)
          acc[l] <= acc[l] + ACC_W'(prod[l]);
        if (int'(step) == K-1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        step <= step + 1'b1;
      end
      if (done) begin
        out_data  <= OUT_W'(total >>> (COEF_W - 1));
        out_valid <= 1'b1;
      end
    end
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (rst) busy |-> !in_valid)
    else $error("fir_halfband: input arrived while a sum was in progress");
endmodule
