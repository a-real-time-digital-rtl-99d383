// tb_axis_bram_writer: a stream of frames with gaps goes in; every beat must
// be written at the next address (wrapping at 2**AW), `finished` must
// follow tlast and `frames` must count the frames.
module tb_axis_bram_writer;
  import drs_pkg::*;
  localparam int AW = 5;
  logic clk = 0, rst = 1;
  axis_t s;
  logic tready, we, fin;
  logic [AW-1:0] addr, ptr;
  logic [31:0] wd, frames;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;
  axis_bram_writer #(.AW(AW)) dut (.clk, .rst, .s_axis(s), .s_tready(tready), .bram_we(we),
    .bram_addr(addr), .bram_wdata(wd), .sts_addr(ptr), .finished(fin), .frames);
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int n = 0, nf = 0;
    s = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    @(posedge clk); #1;
    for (int i = 0; i < 400; i++) begin
      s.tvalid = ($urandom_range(0, 3) != 0);
      s.tdata  = $urandom;
      s.tlast  = ((n % 12) == 11);
      #1;
      if (s.tvalid) begin
        checks++;
        if (!(tready && we && addr == AW'(n) && wd == s.tdata)) begin
          failures++; $display("beat %0d: we=%0d addr=%0d", n, we, addr);
        end
      end else if (we) begin failures++; checks++; end
      @(posedge clk); #1;
      if (s.tvalid) begin
        checks++;
        if (fin != s.tlast) begin failures++; $display("finished wrong at beat %0d", n); end
        if (s.tlast) nf++;
        n++;
      end
      checks++;
      if (frames != 32'(nf) || ptr != AW'(n)) begin failures++; $display("frames %0d/%0d ptr %0d/%0d", frames, nf, ptr, n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
