// tb_mixer: random RF and LO samples in both modes; the product must equal
// rf*lo in IF mode and rf*8191 (1.0) in baseband mode, one clock later.
module tb_mixer;
  logic clk = 0, rst = 1, dc;
  logic signed [13:0] rf, lo;
  logic signed [27:0] prod;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;
  mixer dut (.clk, .rst, .dc_mode(dc), .rf, .lo, .prod);
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint e;
    rf = 0; lo = 0; dc = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 1000; i++) begin
      rf = 14'($urandom); lo = 14'($urandom); dc = $urandom_range(0, 1);
      if (i == 0) begin rf = -14'sd8192; lo = -14'sd8192; dc = 0; end
      e = longint'(rf) * (dc ? 64'sd8191 : longint'(lo));
      @(posedge clk); #1;
      checks++;
      if (longint'(prod) != e) begin failures++; $display("rf=%0d lo=%0d dc=%0d prod=%0d exp=%0d", rf, lo, dc, prod, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
