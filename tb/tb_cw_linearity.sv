// tb_cw_linearity: the receiver's linearity test at its default sizes.
// Continuous-wave tones at five amplitudes (16 to 4096 ADC counts, 48 dB)
// are fed in both modes, and the measured power must follow the square of
// the amplitude to within 0.5 dB of the strongest tone's ratio.
//   FFTS: tones centred on channels 33, 655 and 1638 (1.0, 20.0 and
//         50.0 MHz), 8 spectra per integration; the tone channel is read
//         from the third integration after each change, the first one that
//         holds only the new tone.
//   RTDR: IF mode, LO 10 MHz on channel 2, tone 195.3 kHz above it on
//         channel 1, recorded continuously; the power at 195.3 kHz (exactly
//         40 cycles per packet) is computed over the samples of a packet
//         recorded at least 3 packets after the change.
// Every point is counted as a check; each mode's 15 or 5 points must all
// pass.
module tb_cw_linearity;
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
    repeat (12000000) @(posedge clk);
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

  real amp = 0.0, f_rf = 1.0e6, a_lo = 0.0, f_lo = 10.0e6;
  always @(negedge clk) begin
    ch1 = 14'(8192 + $rtoi($floor(amp * $cos(2.0 * PI * f_rf * cyc / 125.0e6) + 0.5)));   // rounding ADC
    ch2 = 14'(8192 + $rtoi($floor(a_lo * $cos(2.0 * PI * f_lo * cyc / 125.0e6) + 0.5)));
  end

  function automatic real tone_power(input real s [256]);
    real re = 0.0, im = 0.0;
    for (int i = 0; i < 256; i++) begin
      re += s[i] * $cos(2.0 * PI * 40.0 * i / 256.0);
      im += s[i] * $sin(2.0 * PI * 40.0 * i / 256.0);
    end
    return re * re + im * im;
  endfunction

  task automatic wait_frames(input int n);
    logic [31:0] f0, f1;
    sts_read(STS_FRAMES, f0);
    do begin repeat (1000) @(posedge clk); sts_read(STS_FRAMES, f1); end while (f1 - f0 < n);
  endtask

  real amps [5] = '{4096.0, 1024.0, 256.0, 64.0, 16.0};
  int  chans [3] = '{33, 655, 1638};

  initial begin
    logic [31:0] d;
    real ref_db, db, s [256];
    int base;
    rreq = '0; breq = '0;
    repeat (5) @(posedge clk);
    #1 rst_n = 1;
    // FFTS
    reg_write(CFG_ACCLEN, 8);
    reg_write(CFG_CTRL, 32'h0);
    foreach (chans[c]) begin
      f_rf = chans[c] * 125.0e6 / 4096.0;
      foreach (amps[i]) begin
        amp = amps[i];
        wait_frames(3);
        buf_read(chans[c], d);
        db = 10.0 * $log10(real'(d) + 1.0e-3) - 20.0 * $log10(amp);
        if (i == 0) ref_db = db;
        $display("FFTS channel %0d amplitude %0d: power %0d, %f dB from the 4096 line",
                 chans[c], $rtoi(amp), d, db - ref_db);
        check(db - ref_db < 0.5 && db - ref_db > -0.5, "FFTS linearity");
      end
    end
    // RTDR, IF mode, continuous
    reg_write(CFG_CTRL, 32'h1 | 32'h2);
    reg_write(CFG_CTRL, 32'h2);
    a_lo = 8000.0;
    f_rf = f_lo + 40.0 * 1.25e6 / 256.0;
    foreach (amps[i]) begin
      amp = amps[i];
      wait_frames(4);
      sts_read(STS_FRAMES, d);
      base = ((int'(d) - 1) * 260) % 2048;
      for (int k = 0; k < 256; k++) begin
        logic [31:0] w;
        buf_read((base + 4 + k) % 2048, w);
        s[k] = real'($signed(w));
      end
      db = 10.0 * $log10(tone_power(s)) - 20.0 * $log10(amp);
      if (i == 0) ref_db = db;
      $display("RTDR amplitude %0d: %f dB from the 4096 line", $rtoi(amp), db - ref_db);
      check(db - ref_db < 0.5 && db - ref_db > -0.5, "RTDR linearity");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
