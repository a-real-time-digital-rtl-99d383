// tb_adc_formatter: random offset-binary codes in, checks the 2's complement
// value (code - 8192) one clock later.
module tb_adc_formatter;
  logic clk = 0, rst = 1;
  logic [13:0] raw;
  logic signed [13:0] data;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;
  adc_formatter dut (.clk, .rst, .adc_raw(raw), .data);
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int exp_v;
    raw = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 500; i++) begin
      raw = (i < 3) ? 14'(i * 8191) : 14'($urandom);
      exp_v = int'(raw) - 8192;
      @(posedge clk); #1;
      checks++;
      if (int'(data) != exp_v) begin failures++; $display("raw=%0d data=%0d exp=%0d", raw, data, exp_v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
