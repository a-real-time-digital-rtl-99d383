// tb_fir_halfband: designs the 256 coefficients itself from the recipe
// (inverse CIC response over 0..1/4, Kaiser window beta 10, unit DC gain,
// 20-bit rounding) and checks the filter against the direct convolution
// y[m] = sum_i h[i] x[2m+1-i] >> 19 for an impulse, a DC level and random
// data, one input every 50 clocks. Also checks the output latency (33
// clocks), the output rate (one per two inputs) and the DC gain, and that
// the coefficients reject everything above 0.27 of the input rate (675 kHz
// at 2.5 MSPS) by at least 90 dB.
module tb_fir_halfband;
  localparam int TAPS = 256, K = 32;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst = 1, iv, ov;
  logic signed [23:0] x;
  logic signed [31:0] y;
  longint h [TAPS];
  longint xs [2000];
  int checks = 0, failures = 0, nin = 0, nout = 0, t_in = 0, cyc = 0;
  always #4 clk = ~clk;
  fir_halfband dut (.clk, .rst, .in_data(x), .in_valid(iv), .out_data(y), .out_valid(ov));
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic real i0(input real v);
    real s = 1.0, t = 1.0;
    for (int k = 1; k < 40; k++) begin t = t * (v / (2.0 * k)) ** 2; s += t; end
    return s;
  endfunction
  initial begin
    real hr [TAPS];
    real c = 127.5, sum = 0.0, g, v, a, r;
    for (int n = 0; n < TAPS; n++) begin
      a = 0.0;
      for (int k = 0; k < 256; k++) begin
        v = (k + 0.5) * (0.25 / 256);
        g = ($sin(PI * v) / (50.0 * $sin(PI * v / 50.0))) ** 3;
        a += $cos(2.0 * PI * v * (n - c)) / g;
      end
      r = 2.0 * (n - c) / 255.0;
      hr[n] = 2.0 * a * (0.25 / 256) * i0(10.0 * $sqrt(1.0 - r * r)) / i0(10.0);
      sum += hr[n];
    end
    for (int n = 0; n < TAPS; n++) h[n] = longint'($rtoi(hr[n] / sum * 524288.0 + (hr[n] < 0 ? -0.5 : 0.5)));
    begin
      real worst = 0.0, re, im, mag;
      for (int f = 270; f <= 500; f++) begin
        re = 0.0; im = 0.0;
        for (int n = 0; n < TAPS; n++) begin
          re += real'(h[n]) * $cos(2.0 * PI * f / 1000.0 * n);
          im -= real'(h[n]) * $sin(2.0 * PI * f / 1000.0 * n);
        end
        mag = $sqrt(re * re + im * im) / 524288.0;
        if (mag > worst) worst = mag;
      end
      checks++;
      if (worst > 10.0 ** (-90.0 / 20.0)) begin
        failures++; $display("stop band only %f dB down", -20.0 * $log10(worst));
      end
    end
  end
  always @(posedge clk) begin
    cyc++;
    if (!rst && iv) begin xs[nin] = longint'(x); nin++; t_in = cyc; end
  end
  always @(negedge clk) if (ov) begin
    longint acc; int n;
    n = 2 * nout + 1;
    acc = 0;
    for (int i = 0; i < TAPS; i++) if (n - i >= 0) acc += h[i] * xs[n-i];
    checks++;
    if (longint'(y) != (acc >>> 19)) begin failures++; if (failures < 10) $display("out %0d: %0d exp %0d", nout, y, acc >>> 19); end
    checks++;
    if (cyc - t_in != K + 1) begin failures++; $display("latency %0d", cyc - t_in); end
    nout++;
  end
  initial begin
    iv = 0; x = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int i = 0; i < 1500; i++) begin
      if (i < 300)       x = (i == 10) ? 24'sd131072 : 24'sd0;    // impulse
      else if (i < 900)  x = 24'sd1000000;                        // DC level
      else               x = 24'($urandom);
      iv = 1;
      @(posedge clk); #1;
      iv = 0;
      if (i == 899) begin
        checks++;   // DC gain 1 within 0.05 %
        if (y < 999500 || y > 1000500) begin failures++; $display("DC out %0d", y); end
      end
      repeat (49) @(posedge clk); #1;
    end
    checks++;
    if (nout != 750) begin failures++; $display("outputs %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
