// tb_axi_bram_reader: reads random addresses of a RAM model through the
// AXI4-Lite port with random rready stalls; each returned word must match,
// stay stable while stalled, and arrive two clocks after the address
// handshake. A write must be answered with SLVERR.
module tb_axi_bram_reader;
  import drs_pkg::*;
  logic clk = 0, rst = 1;
  axil_req_t req;
  axil_rsp_t rsp;
  logic re;
  logic [10:0] addr;
  logic [31:0] rdata;
  logic [31:0] mem [2048];
  int checks = 0, failures = 0;
  always #4 clk = ~clk;
  axi_bram_reader dut (.clk, .rst, .req, .rsp, .bram_re(re), .bram_addr(addr), .bram_rdata(rdata));
  always_ff @(posedge clk) if (re) rdata <= mem[addr];   // RAM model, one clock latency
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int a, lat;
    for (int i = 0; i < 2048; i++) mem[i] = $urandom;
    req = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    @(posedge clk); #1;
    for (int i = 0; i < 300; i++) begin
      a = $urandom_range(0, 2047);
      req.araddr = 16'(a * 4); req.arvalid = 1; req.rready = 0;
      while (!rsp.arready) begin @(posedge clk); #1; end
      @(posedge clk); #1;
      req.arvalid = 0; lat = 1;
      while (!rsp.rvalid) begin @(posedge clk); #1; lat++; end
      checks++;
      if (lat != 2) begin failures++; $display("latency %0d", lat); end
      repeat ($urandom_range(0, 3)) begin @(posedge clk); #1; end
      checks++;
      if (!rsp.rvalid || rsp.rdata != mem[a] || rsp.rresp != RESP_OKAY) begin
        failures++; $display("addr %0d got %h exp %h", a, rsp.rdata, mem[a]);
      end
      req.rready = 1;
      @(posedge clk); #1;
      req.rready = 0;
    end
    // write attempt
    req.awaddr = 16'h10; req.awvalid = 1; req.wvalid = 1; req.wdata = 32'hdead; req.wstrb = 4'hf; req.bready = 1;
    @(posedge clk); #1;
    req.awvalid = 0; req.wvalid = 0;
    while (!rsp.bvalid) begin @(posedge clk); #1; end
    checks++;
    if (rsp.bresp != RESP_SLVERR) failures++;
    @(posedge clk); #1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
