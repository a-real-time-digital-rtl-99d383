// tb_cic_decim: random full-scale input at 125 MSPS. The reference is the
// direct convolution with the CIC impulse response (a length-R boxcar
// convolved with itself N=3 times), evaluated at every R-th input and
// scaled by 2**-21. One output per 50 inputs is checked, exactly.
module tb_cic_decim;
  localparam int R = 50, N = 3, L = N*(R-1)+1;
  logic clk = 0, rst = 1, iv, ov;
  logic signed [27:0] x;
  logic signed [23:0] y;
  longint h [L];
  longint xs [4000];
  int checks = 0, failures = 0;
  always #4 clk = ~clk;
  cic_decim dut (.clk, .rst, .in_data(x), .in_valid(iv), .out_data(y), .out_valid(ov));
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // impulse response of the boxcar cascade
  initial begin
    longint t [L];
    for (int i = 0; i < L; i++) h[i] = (i < R) ? 1 : 0;
    for (int s = 1; s < N; s++) begin
      for (int i = 0; i < L; i++) begin
        t[i] = 0;
        for (int k = 0; k < R; k++) if (i - k >= 0) t[i] += h[i-k];
      end
      for (int i = 0; i < L; i++) h[i] = t[i];
    end
  end
  int nin = 0, nout = 0, last_out = -1;
  always @(posedge clk) if (!rst && iv) begin xs[nin] = longint'(x); nin++; end
  always @(negedge clk) if (ov) begin
    longint acc; int n;
    n = nout * R + R - 1 - (N - 1);   // integrators are pipelined: two inputs of delay
    acc = 0;
    for (int k = 0; k < L; k++) if (n - k >= 0) acc += h[k] * xs[n-k];
    checks++;
    if (longint'(y) != (acc >>> 21)) begin failures++; $display("out %0d: %0d exp %0d", nout, y, acc >>> 21); end
    nout++;
  end
  initial begin
    iv = 0; x = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int i = 0; i < 3800; i++) begin
      iv = 1;
      x = (i < 1000) ? 28'sh7ffffff - 28'(i % 3) : 28'($urandom);
      @(posedge clk); #1;
    end
    iv = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (nout != 3800 / R) begin failures++; $display("outputs %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
