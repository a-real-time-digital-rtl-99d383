// tb_pfb_fir: 8 taps, 16 branches. The testbench computes the Hamming-
// windowed sinc itself and checks every output against
// y[n] = sat(sum_t h[(7-t)*16 + n%16] * x[n-16t] >> 12), one clock after
// its input, for random input with gaps in in_valid, once the delay
// memories have filled (after 7*16 inputs).
module tb_pfb_fir;
  localparam int T = 8, N = 16, M = T*N;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst = 1, iv, ov;
  logic signed [13:0] x;
  logic signed [17:0] y;
  longint h [M];
  longint xs [4000];
  int checks = 0, failures = 0, nin = 0, nout = 0;
  always #4 clk = ~clk;
  pfb_fir #(.TAPS(T), .NFFT(N)) dut (.clk, .rst, .in_data(x), .in_valid(iv), .out_data(y), .out_valid(ov));
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    real c, u, s, w, r;
    c = (M - 1) / 2.0;
    for (int i = 0; i < M; i++) begin
      u = (i - c) / N;
      s = (u == 0.0) ? 1.0 : $sin(PI * u) / (PI * u);
      w = 0.54 - 0.46 * $cos(2.0 * PI * i / (M - 1));
      r = s * w * 65536.0;
      h[i] = longint'($rtoi(r < 0.0 ? r - 0.5 : r + 0.5));
    end
  end
  logic pend;
  always @(posedge clk) begin
    if (!rst && pend) begin
      longint acc; int n;
      n = nin - 1;
      acc = 0;
      for (int t = 0; t < T; t++) if (n - t*N >= 0) acc += h[(T-1-t)*N + n % N] * xs[n - t*N];
      acc = acc >>> 12;
      if (acc > 131071) acc = 131071;
      if (acc < -131072) acc = -131072;
      if (n >= (T-1)*N) checks++;   // the delay memories start unfilled
      if (n >= (T-1)*N && (!ov || longint'(y) != acc)) begin failures++; if (failures < 10) $display("n %0d: %0d exp %0d ov %0d", n, y, acc, ov); end
      nout++;
    end else if (!rst && ov) begin failures++; checks++; end
    pend <= !rst && iv;
    if (!rst && iv) begin xs[nin] = longint'(x); nin++; end
  end
  initial begin
    iv = 0; x = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int i = 0; i < 3000; i++) begin
      iv = $urandom_range(0, 4) != 0;
      if (i < 400)       x = -14'sd8192;   // full-scale level
      else if (i < 800)  x = 14'sd8191;
      else               x = 14'($urandom);
      @(posedge clk); #1;
    end
    iv = 0;
    @(posedge clk); #1;
    checks++;
    if (nout != nin) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
