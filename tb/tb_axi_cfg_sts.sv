// tb_axi_cfg_sts: writes the cfg words with address and data in either
// order and with byte strobes, reads them back and checks the cfg outputs;
// reads the status words, which the testbench drives with random values.
module tb_axi_cfg_sts;
  import drs_pkg::*;
  logic clk = 0, rst = 1;
  axil_req_t req;
  axil_rsp_t rsp;
  logic [31:0] cfg [CFG_WORDS];
  logic [31:0] sts [STS_WORDS];
  logic [31:0] model [CFG_WORDS];
  int checks = 0, failures = 0;
  always #4 clk = ~clk;
  axi_cfg_sts dut (.clk, .rst, .req, .rsp, .cfg, .sts);
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic axil_write(input logic [15:0] a, input logic [31:0] d, input logic [3:0] st, input int order);
    req.bready = 1;
    if (order != 2) begin req.awaddr = a; req.awvalid = 1; end
    if (order != 1) begin req.wdata = d; req.wstrb = st; req.wvalid = 1; end
    do begin
      @(posedge clk); #1;
      if (req.awvalid && !(order == 1 && 0)) req.awvalid = 0;
      if (req.wvalid) req.wvalid = 0;
      if (order == 1) begin req.wdata = d; req.wstrb = st; req.wvalid = 1; order = 0; end
      else if (order == 2) begin req.awaddr = a; req.awvalid = 1; order = 0; end
    end while (!rsp.bvalid);
    @(posedge clk); #1;
    req.bready = 0;
  endtask
  task automatic axil_read(input logic [15:0] a, output logic [31:0] d);
    req.araddr = a; req.arvalid = 1; req.rready = 1;
    while (!rsp.arready) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    req.arvalid = 0;
    while (!rsp.rvalid) begin @(posedge clk); #1; end
    d = rsp.rdata;
    @(posedge clk); #1;
    req.rready = 0;
  endtask
  initial begin
    logic [31:0] d, v;
    logic [3:0] st;
    int w;
    req = '0;
    for (int i = 0; i < STS_WORDS; i++) sts[i] = $urandom;
    for (int i = 0; i < CFG_WORDS; i++) model[i] = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    @(posedge clk); #1;
    for (int i = 0; i < 200; i++) begin
      w = $urandom_range(0, CFG_WORDS-1); v = $urandom; st = 4'($urandom);
      axil_write(16'(w * 4), v, st, $urandom_range(0, 2));
      for (int b = 0; b < 4; b++) if (st[b]) model[w][8*b +: 8] = v[8*b +: 8];
      checks++;
      for (int k = 0; k < CFG_WORDS; k++) if (cfg[k] != model[k]) begin
        failures++; $display("cfg[%0d]=%h exp %h", k, cfg[k], model[k]); break;
      end
      w = $urandom_range(0, CFG_WORDS-1);
      axil_read(16'(w * 4), d);
      checks++;
      if (d != model[w]) begin failures++; $display("readback cfg[%0d]=%h exp %h", w, d, model[w]); end
      w = $urandom_range(0, STS_WORDS-1);
      sts[w] = $urandom;
      axil_read(16'h100 + 16'(w * 4), d);
      checks++;
      if (d != sts[w]) begin failures++; $display("sts[%0d]=%h exp %h", w, d, sts[w]); end
    end
    // a write into the status region must not change any cfg word
    axil_write(16'h100, 32'hffffffff, 4'hf, 0);
    checks++;
    for (int k = 0; k < CFG_WORDS; k++) if (cfg[k] != model[k]) begin failures++; break; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
