// tb_bram_dp: random writes and reads against a model array; read data must
// appear one clock after the read and return the old word on a collision.
module tb_bram_dp;
  logic clk = 0, we, re;
  logic [10:0] wa, ra;
  logic [31:0] wd, rd;
  logic [31:0] model [2048];
  int checks = 0, failures = 0;
  always #4 clk = ~clk;
  bram_dp dut (.clk, .we, .wr_addr(wa), .wr_data(wd), .re, .rd_addr(ra), .rd_data(rd));
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [31:0] e;
    logic pend;
    we = 0; re = 0; wa = 0; ra = 0; wd = 0; pend = 0; e = 0;
    // fill
    for (int i = 0; i < 2048; i++) begin
      we = 1; wa = 11'(i); wd = $urandom; model[i] = wd;
      @(posedge clk); #1;
    end
    we = 0;
    for (int i = 0; i < 5000; i++) begin
      we = $urandom_range(0, 1); wa = 11'($urandom); wd = $urandom;
      re = $urandom_range(0, 1); ra = (i % 7 == 0) ? wa : 11'($urandom);
      if (pend) begin
        checks++;
        if (rd !== e) begin failures++; $display("read mismatch %h %h", rd, e); end
      end
      pend = re; e = model[ra];
      if (we) model[wa] = wd;
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
