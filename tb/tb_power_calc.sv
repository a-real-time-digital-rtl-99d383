// tb_power_calc: random bins; the power re^2+im^2 and the channel must come
// out one clock later for bins below NFFT/2, and nothing for the others.
module tb_power_calc;
  logic clk = 0, rst = 1, iv, ov;
  logic signed [17:0] re, im;
  logic [11:0] idx;
  logic [36:0] pw;
  logic [10:0] ch;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;
  power_calc dut (.clk, .rst, .in_re(re), .in_im(im), .in_idx(idx), .in_valid(iv),
    .out_pow(pw), .out_chan(ch), .out_valid(ov));
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint e;
    logic ev;
    iv = 0; re = 0; im = 0; idx = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 2000; i++) begin
      re = 18'($urandom); im = 18'($urandom); idx = 12'($urandom); iv = $urandom_range(0, 3) != 0;
      if (i == 5) begin re = -18'sd131072; im = -18'sd131072; idx = 3; iv = 1; end
      e = longint'(re) * longint'(re) + longint'(im) * longint'(im);
      ev = iv && idx < 2048;
      @(posedge clk); #1;
      checks++;
      if (ov != ev || (ev && (longint'(pw) != e || ch != idx[10:0]))) begin
        failures++; $display("re=%0d im=%0d idx=%0d pw=%0d exp=%0d ov=%0d", re, im, idx, pw, e, ov);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
