// tb_drs_top: the whole receiver at its default sizes, driven through the
// two AXI4-Lite ports as the processor would drive it.
//  1 FFTS: a tone exactly on channel 100 (100 * 125 MHz / 4096) on ADC
//    channel 1, 4 spectra per integration. After `finished` the 2048 words
//    are read from the buffer; channel 100 must hold the peak, 30 dB above
//    every channel more than 3 away; integrations must be 4*4096 clocks
//    apart; the overrun flag must stay clear.
//  2 mode switch to RTDR, baseband, triggered, 1-packet bursts: nothing is
//    written before the trigger; after it one 260-word packet (PC 0, TC 1,
//    OC 0, then 256 samples of the DC input scaled by 50**3/2**21).
//  3 RTDR, IF mode, continuous: packets keep coming, the ring pointer
//    follows them, samples equal rf*lo*50**3/2**21.
// Each mechanism is counted; one that never happened counts a failure.
module tb_drs_top;
  import drs_pkg::*;
  localparam real PI = 3.14159265358979323846;
  localparam real GAIN = 125000.0 / 2097152.0;
  logic clk = 0, rst_n = 0, trig = 0;
  logic [13:0] ch1, ch2;
  axil_req_t rreq, breq;
  axil_rsp_t rrsp, brsp;
  int checks = 0, failures = 0;
  longint cyc = 0;
  int n_integ = 0, n_finished = 0, n_mode = 0, n_burst = 0, n_cont = 0, n_dc = 0, n_if = 0;
  always #4 clk = ~clk;
  always @(posedge clk) cyc++;

  drs_top dut (.clk, .rst_n, .adc_ch1(ch1), .adc_ch2(ch2), .trig_in(trig),
    .reg_req(rreq), .reg_rsp(rrsp), .buf_req(breq), .buf_rsp(brsp));

  initial begin
    repeat (3000000) @(posedge clk);
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

  // ---- ADC stimulus ----------------------------------------------------------
  int   mode_stim = 0;   // 0: tone on ch1, 1: DC levels
  int   dc1 = 3000, dc2 = 2000;
  longint n_s = 0;
  always @(negedge clk) begin
    n_s++;
    if (mode_stim == 0) ch1 = 14'(8192 + $rtoi(4000.0 * $cos(2.0 * PI * 100.0 * n_s / 4096.0)));
    else                ch1 = 14'(8192 + dc1);
    ch2 = 14'(8192 + dc2);
  end

  initial begin
    logic [31:0] d, f0, f1;
    longint spec [2048];
    longint t_prev;
    int pk, base;
    real e;
    rreq = '0; breq = '0;
    repeat (5) @(posedge clk);
    #1 rst_n = 1;
    repeat (3) @(posedge clk); #1;

    // ---- 1: FFT spectrometer -------------------------------------------
    reg_write(CFG_ACCLEN, 4);
    reg_write(CFG_CTRL, 32'h0);
    t_prev = 0;
    for (int it = 0; it < 6; it++) begin
      // wait for a new integration to finish
      sts_read(STS_FRAMES, f0);
      do begin sts_read(STS_FRAMES, f1); end while (f1 == f0);
      sts_read(STS_WRITER, d);
      if (d[31]) n_finished++;
      n_integ++;
      if (it >= 2) check(cyc - t_prev > 4*4096 - 64 && cyc - t_prev < 4*4096 + 64,
                         $sformatf("integration period %0d", cyc - t_prev));
      t_prev = cyc;
      if (it == 4) begin
        for (int c = 0; c < 2048; c++) begin buf_read(c, d); spec[c] = longint'(d); end
        pk = 0;
        for (int c = 1; c < 2048; c++) if (spec[c] > spec[pk]) pk = c;
        check(pk == 100, $sformatf("FFTS peak in channel %0d", pk));
        for (int c = 0; c < 2048; c++) if (c < 97 || c > 103)
          check(spec[c] * 1000 <= spec[100], $sformatf("channel %0d = %0d vs %0d", c, spec[c], spec[100]));
      end
    end
    sts_read(STS_WRITER, d);
    check(!d[30], "FFTS overrun");
    sts_read(STS_SPECTRA, d);
    check(d >= 6, "integration count");

    // ---- 2: switch to the recorder, triggered, baseband ---------------
    mode_stim = 1;
    reg_write(CFG_BURST, 1);
    reg_write(CFG_CTRL, 32'h1 | 32'h2 | 32'h4 | 32'h8);   // reset while switching
    reg_write(CFG_CTRL, 32'h2 | 32'h4 | 32'h8);
    n_mode++;
    repeat (30000) @(posedge clk); #1;
    sts_read(STS_FRAMES, d);
    check(d == 0, "no packet before the trigger");
    trig = 1; repeat (50) @(posedge clk); #1 trig = 0;
    repeat (100 * 256 + 2000) @(posedge clk); #1;
    sts_read(STS_FRAMES, d);
    check(d == 1, $sformatf("one packet per burst, got %0d", d));
    if (d == 1) n_burst++;
    sts_read(STS_TC, d);
    check(d == 1, "trigger count");
    sts_read(STS_TFRC, d);
    check(d > 30000, "trigger time stamp");
    sts_read(STS_WRITER, d);
    check(d[10:0] == 11'(4 + 256), $sformatf("write pointer %0d", d[10:0]));
    buf_read(0, d); check(d == 0, "header PC");
    buf_read(1, d); check(d == 1, "header TC");
    buf_read(3, d); check(d == 0, "header OC");
    e = real'(dc1) * 8191.0 * GAIN;
    for (int i = 0; i < 256; i++) begin
      buf_read(4 + i, d);
      check(real'($signed(d)) > e * 0.995 && real'($signed(d)) < e * 1.005, $sformatf("baseband sample %0d", $signed(d)));
    end
    n_dc++;

    // ---- 3: recorder, IF mode, continuous ----------------------------------
    reg_write(CFG_CTRL, 32'h1 | 32'h2);
    reg_write(CFG_CTRL, 32'h2);
    n_mode++;
    repeat (100 * 260 * 3) @(posedge clk); #1;
    sts_read(STS_FRAMES, d);
    check(d >= 2, $sformatf("continuous packets %0d", d));
    if (d >= 2) n_cont++;
    sts_read(STS_WRITER, f1);
    check(int'(f1[10:0]) >= int'(d) * 260 % 2048 && int'(f1[10:0]) < int'(d) * 260 % 2048 + 260, "ring pointer");
    base = 260;                       // second packet, filter settled
    buf_read(base, d); check(d == 1, "second packet PC");
    e = real'(dc1) * real'(dc2) * GAIN;
    for (int i = 0; i < 256; i += 15) begin
      buf_read(base + 4 + i, d);
      check(real'($signed(d)) > e * 0.995 && real'($signed(d)) < e * 1.005, $sformatf("IF sample %0d exp %f", $signed(d), e));
    end
    n_if++;

    // ---- and back to the spectrometer -------------------------------------
    mode_stim = 0;
    reg_write(CFG_CTRL, 32'h1);
    reg_write(CFG_CTRL, 32'h0);
    n_mode++;
    sts_read(STS_FRAMES, f0);
    do begin sts_read(STS_FRAMES, f1); end while (f1 == f0);
    n_integ++;

    $display("mechanisms: integrations %0d finished %0d mode switches %0d bursts %0d continuous %0d baseband %0d IF %0d",
             n_integ, n_finished, n_mode, n_burst, n_cont, n_dc, n_if);
    check(n_integ > 0 && n_finished > 0 && n_mode > 0 && n_burst > 0 && n_cont > 0 && n_dc > 0 && n_if > 0,
          "every mechanism happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
