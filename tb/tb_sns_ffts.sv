// tb_sns_ffts: the spectrometer workload of the spin-noise measurements.
// Input on ADC channel 1: two narrow noise lines at 2.4 MHz and 3.6 MHz
// (the 85Rb and 87Rb Larmor peaks at about 5.1 G), each a sine whose phase
// jumps at random every 1000 samples on average (a line some 100 kHz
// wide), on top of white noise. The receiver runs at its default sizes and
// integrates 1000 spectra, the paper's example of a 32.8 ms integration.
// Checks: an integration takes 1000 * 4096 clocks; in the second one the
// strongest channel near 2.4 MHz is within 2 of channel 79 and the one near
// 3.6 MHz within 2 of channel 118, each at least 10 times the median channel.
module tb_sns_ffts;
  import drs_pkg::*;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 0, trig = 0;
  logic [13:0] ch1, ch2;
  axil_req_t rreq, breq;
  axil_rsp_t rrsp, brsp;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always #4 clk = ~clk;
  always @(posedge clk) cyc++;

  drs_top dut (.clk, .rst_n, .adc_ch1(ch1), .adc_ch2(ch2), .trig_in(trig),
    .reg_req(rreq), .reg_rsp(rrsp), .buf_req(breq), .buf_rsp(brsp));

  initial begin
    repeat (9000000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // ---- processor-side bus tasks -----------------------------------------
  task automatic reg_write(input int word, input logic [31:0] d);
    rreq.awaddr = 16'(word * 4); rreq.awvalid = 1;
    rreq.wdata = d; rreq.wstrb = 4'hf; rreq.wvalid = 1; rreq.bready = 1;
    do @(posedge clk); while (!(rrsp.awready && rrsp.wready));
    #1 rreq.awvalid = 0; rreq.wvalid = 0;
    while (!rrsp.bvalid) begin @(posedge clk); #1; end
    @(posedge clk); #1 rreq.bready = 0;
  endtask
  task automatic axil_read(ref axil_req_t q, ref axil_rsp_t p, input logic [15:0] a, output logic [31:0] d);
    q.araddr = a; q.arvalid = 1; q.rready = 1;
    do @(posedge clk); while (!p.arready);
    #1 q.arvalid = 0;
    while (!p.rvalid) begin @(posedge clk); #1; end
    d = p.rdata;
    @(posedge clk); #1 q.rready = 0;
  endtask
  task automatic sts_read(input int word, output logic [31:0] d);
    axil_read(rreq, rrsp, 16'h100 + 16'(word * 4), d);
  endtask
  task automatic buf_read(input int word, output logic [31:0] d);
    axil_read(breq, brsp, 16'(word * 4), d);
  endtask
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---- spin-noise-like stimulus ------------------------------------------------
  real ph1 = 0.0, ph2 = 0.0;
  always @(negedge clk) begin
    real v;
    if ($urandom_range(0, 999) == 0) ph1 = 2.0 * PI * $urandom_range(0, 999) / 1000.0;
    if ($urandom_range(0, 999) == 0) ph2 = 2.0 * PI * $urandom_range(0, 999) / 1000.0;
    v = 1500.0 * $cos(2.0 * PI * 2.4e6 * cyc / 125.0e6 + ph1)
      + 1000.0 * $cos(2.0 * PI * 3.6e6 * cyc / 125.0e6 + ph2)
      + real'($urandom_range(0, 2000)) - 1000.0;
    ch1 = 14'(8192 + $rtoi(v));
    ch2 = 14'd8192;
  end

  initial begin
    logic [31:0] d, f0, f1;
    longint spec [2048], sorted [2048];
    longint t0, med;
    int p1, p2;
    rreq = '0; breq = '0;
    repeat (5) @(posedge clk);
    #1 rst_n = 1;
    reg_write(CFG_ACCLEN, 1000);
    reg_write(CFG_CTRL, 32'h0);
    sts_read(STS_FRAMES, f0);
    do begin repeat (2000) @(posedge clk); sts_read(STS_FRAMES, f1); end while (f1 == f0);
    t0 = cyc;
    do begin repeat (2000) @(posedge clk); sts_read(STS_FRAMES, f0); end while (f0 == f1);
    check(cyc - t0 > 1000 * 4096 - 3000 && cyc - t0 < 1000 * 4096 + 3000,
          $sformatf("integration took %0d clocks", cyc - t0));
    for (int c = 0; c < 2048; c++) begin buf_read(c, d); spec[c] = longint'(d); sorted[c] = spec[c]; end
    sorted.sort();
    med = sorted[1024];
    p1 = 60; p2 = 100;
    for (int c = 60; c < 100; c++)  if (spec[c] > spec[p1]) p1 = c;
    for (int c = 100; c < 140; c++) if (spec[c] > spec[p2]) p2 = c;
    $display("2.4 MHz line: channel %0d power %0d; 3.6 MHz line: channel %0d power %0d; median %0d",
             p1, spec[p1], p2, spec[p2], med);
    check(p1 >= 77 && p1 <= 81, "2.4 MHz line position");
    check(p2 >= 116 && p2 <= 120, "3.6 MHz line position");
    check(spec[p1] > 10 * med && spec[p2] > 10 * med, "lines above the floor");
    sts_read(STS_WRITER, d);
    check(!d[30], "no overrun");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
