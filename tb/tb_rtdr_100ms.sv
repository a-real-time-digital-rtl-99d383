// tb_rtdr_100ms: the triggered recording workload. The recorder runs at
// its default sizes in IF mode with the LO at 2.0 MHz on ADC channel 2 and
// a spin-noise line at 2.4 MHz on channel 1, so the line sits at 400 kHz in
// the recorded band. One trigger starts a burst of 489 packets, 125,184
// samples at 1.25 MSPS, i.e. the paper's 100 ms acquisition. Checks: 489
// packets and no more, PC = 489 and TC = 1 in the status registers, the
// burst ends after 489 * 256 * 100 clocks, and the last packet in the ring
// has header PC 488, TC 1 and a 400 kHz tone 20 dB above 150 kHz.
module tb_rtdr_100ms;
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
    repeat (14000000) @(posedge clk);
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

  always @(negedge clk) begin
    ch1 = 14'(8192 + $rtoi(3000.0 * $cos(2.0 * PI * 2.4e6 * cyc / 125.0e6)) + $urandom_range(0, 200) - 100);
    ch2 = 14'(8192 + $rtoi(8000.0 * $cos(2.0 * PI * 2.0e6 * cyc / 125.0e6)));
  end

  function automatic real tone_power(input real s [256], input real f);
    real re = 0.0, im = 0.0;
    for (int i = 0; i < 256; i++) begin
      re += s[i] * $cos(2.0 * PI * f * i / 1.25e6);
      im += s[i] * $sin(2.0 * PI * f * i / 1.25e6);
    end
    return re * re + im * im;
  endfunction

  initial begin
    logic [31:0] d;
    real s [256];
    longint t0;
    int base;
    rreq = '0; breq = '0;
    repeat (5) @(posedge clk);
    #1 rst_n = 1;
    reg_write(CFG_BURST, 489);
    reg_write(CFG_CTRL, 32'h1 | 32'h2 | 32'h8);
    reg_write(CFG_CTRL, 32'h2 | 32'h8);          // RTDR, IF, triggered
    repeat (20000) @(posedge clk); #1;
    trig = 1; t0 = cyc; repeat (100) @(posedge clk); #1 trig = 0;
    do begin repeat (5000) @(posedge clk); sts_read(STS_WRITER, d); end while (d[29]);
    check(cyc - t0 > 489 * 256 * 100 - 200 && cyc - t0 < 489 * 256 * 100 + 12000,
          $sformatf("burst lasted %0d clocks", cyc - t0));
    repeat (2000) @(posedge clk);
    sts_read(STS_FRAMES, d); check(d == 489, $sformatf("packets %0d", d));
    sts_read(STS_PC, d);     check(d == 489, $sformatf("PC %0d", d));
    sts_read(STS_TC, d);     check(d == 1, $sformatf("TC %0d", d));
    base = (488 * 260) % 2048;
    buf_read(base, d);     check(d == 488, $sformatf("last header PC %0d", d));
    buf_read(base + 1, d); check(d == 1, "last header TC");
    for (int i = 0; i < 256; i++) begin buf_read((base + 4 + i) % 2048, d); s[i] = real'($signed(d)); end
    check(tone_power(s, 400.0e3) > 100.0 * tone_power(s, 150.0e3), "400 kHz IF line");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
