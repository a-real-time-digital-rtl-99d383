// tb_fft_r2sdf: 64-point FFT, continuous random complex input. Every output
// (magnitude below full scale) is compared with a double-precision DFT of its input frame divided by
// NFFT (tolerance 4 LSB); the natural indices of each frame must be the
// bit-reversed sequence, and the delay from a frame's first input to its
// first output must be NFFT+log2(NFFT)-2 clocks for every frame.
module tb_fft_r2sdf;
  localparam int N = 64, S = 6, FRAMES = 12;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst = 1, iv, ov;
  logic signed [17:0] xr, xi, yr, yi;
  logic [S-1:0] idx;
  real inr [FRAMES*N], ini [FRAMES*N];
  int checks = 0, failures = 0, nin = 0, nout = 0, cyc = 0, t_first [FRAMES];
  always #4 clk = ~clk;
  fft_r2sdf #(.NFFT(N)) dut (.clk, .rst, .in_re(xr), .in_im(xi), .in_valid(iv),
    .out_re(yr), .out_im(yi), .out_idx(idx), .out_valid(ov));
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic int bitrev(input int v);
    int r = 0;
    for (int b = 0; b < S; b++) if (v & (1 << b)) r |= 1 << (S-1-b);
    return r;
  endfunction
  always @(posedge clk) begin
    cyc++;
    if (!rst && iv) begin
      if (nin % N == 0 && nin / N < FRAMES) t_first[nin / N] = cyc;
      if (nin < FRAMES*N) begin inr[nin] = real'(xr); ini[nin] = real'(xi); end
      nin++;
    end
  end
  always @(negedge clk) if (ov && nout < (FRAMES-2)*N) begin
    int f, k;
    real er, ei;
    f = nout / N; k = int'(idx);
    checks++;
    if (k != bitrev(nout % N)) begin failures++; $display("index %0d at %0d", k, nout); end
    if (nout % N == 0) begin
      checks++;
      if (cyc - t_first[f] != N + S - 2) begin failures++; $display("delay %0d", cyc - t_first[f]); end
    end
    er = 0.0; ei = 0.0;
    for (int n = 0; n < N; n++) begin
      er += inr[f*N+n] * $cos(2.0*PI*n*k/N) + ini[f*N+n] * $sin(2.0*PI*n*k/N);
      ei += ini[f*N+n] * $cos(2.0*PI*n*k/N) - inr[f*N+n] * $sin(2.0*PI*n*k/N);
    end
    er = er / N; ei = ei / N;
    checks++;
    if ((real'(yr) - er) > 4.0 || (er - real'(yr)) > 4.0 || (real'(yi) - ei) > 4.0 || (ei - real'(yi)) > 4.0) begin
      failures++;
      if (failures < 10) $display("frame %0d bin %0d: %0d,%0d exp %f,%f", f, k, yr, yi, er, ei);
    end
    nout++;
  end
  initial begin
    iv = 0; xr = 0; xi = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int i = 0; i < FRAMES*N; i++) begin
      iv = 1;
      if (i < 2*N) begin   // full-scale tone in bin 5 for two frames
        xr = 18'($rtoi(131071.0 * $cos(2.0*PI*5*i/N)));
        xi = 18'($rtoi(131071.0 * $sin(2.0*PI*5*i/N)));
      end else begin
        xr = 18'(int'($urandom_range(0, 185362)) - 92681); xi = 18'(int'($urandom_range(0, 185362)) - 92681);
      end
      @(posedge clk); #1;
    end
    iv = 0;
    checks++;
    if (nout != (FRAMES-2)*N) begin failures++; $display("outputs %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
