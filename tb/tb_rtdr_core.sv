// tb_rtdr_core: the recorder chain at its real rates (decimation 50 and 2,
// 256-tap FIR) with 16-sample packets.
//  1 baseband, continuous: a DC input must come out as rf * 1.0 * 50**3 /
//    2**21 (0.5 %), samples 100 clocks apart (the first of a packet waits for the header), packets of 4 header words
//    (PC counting up, TC 0, FRC advancing 1600 per packet, OC 0) plus 16
//    samples with tlast on the last.
//  2 IF mode: rf at 10 MHz times lo at 10.1 MHz must give a 100 kHz tone of
//    rms rf*lo/2/sqrt(2) * gain (5 %), the 20.1 MHz product being removed.
//  3 triggered: nothing before a trigger, then exactly burst_pkts packets
//    per trigger, TC in the header counting the triggers.
module tb_rtdr_core;
  import drs_pkg::*;
  localparam int P = 16;
  localparam real PI = 3.14159265358979323846;
  localparam real GAIN = 125000.0 / 2097152.0;
  logic clk = 0, rst = 1, dc, trg, trig = 0, act;
  logic signed [13:0] rf, lo;
  logic [15:0] burst;
  axis_t m;
  logic [31:0] frc, oc, tc, pc, t_frc, t_oc;
  logic [31:0] beats [$];
  logic        lasts [$];
  int          times [$];
  int checks = 0, failures = 0, cyc = 0;
  always #4 clk = ~clk;
  rtdr_core #(.PKT_SAMPLES(P)) dut (.clk, .rst, .rf, .lo, .dc_mode(dc), .triggered(trg),
    .burst_pkts(burst), .trig_in(trig), .m_axis(m), .m_tready(1'b1),
    .frc, .oc, .tc, .pc, .t_frc, .t_oc, .burst_active(act));
  initial begin
    repeat (600000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) begin
    cyc++;
    if (!rst && m.tvalid) begin beats.push_back(m.tdata); lasts.push_back(m.tlast); times.push_back(cyc); end
  end
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic restart();
    rst = 1; repeat (3) @(posedge clk); #1 rst = 0;
    beats.delete(); lasts.delete(); times.delete();
  endtask
  // checks the packet framing of what was collected; returns the samples
  task automatic parse(input int tc_exp, input int pc0, output real s [$], input bit check_frc);
    int k = 0, pk = 0;
    int f_prev;
    s.delete();
    while (k + 4 + P <= beats.size()) begin
      check(int'(beats[k]) == pc0 + pk, $sformatf("PC %0d exp %0d", beats[k], pc0 + pk));
      check(int'(beats[k+1]) == tc_exp, $sformatf("TC %0d exp %0d", beats[k+1], tc_exp));
      check(beats[k+3] == 0, "OC");
      if (check_frc && pk > 0) check(int'(beats[k+2]) - f_prev == 100 * P, $sformatf("FRC step %0d", int'(beats[k+2]) - f_prev));
      f_prev = int'(beats[k+2]);
      for (int i = 0; i < P; i++) begin
        s.push_back(real'($signed(beats[k+4+i])));
        check(lasts[k+4+i] == (i == P-1), "tlast");
        if (i > 1) check(times[k+4+i] - times[k+3+i] == 100, "sample spacing");
      end
      k += 4 + P; pk++;
    end
  endtask
  initial begin
    real s [$];
    real e, acc;
    int n;
    dc = 1; trg = 0; burst = 2; rf = 14'sd4000; lo = 0;
    restart();
    // 1: baseband DC
    repeat (100 * 16 * 12) @(posedge clk);
    parse(0, 0, s, 1);
    e = 4000.0 * 8191.0 * GAIN;
    check(s.size() >= 160, "baseband sample count");
    for (int i = 150; i < s.size(); i++) check(s[i] > e * 0.995 && s[i] < e * 1.005, $sformatf("DC %f exp %f", s[i], e));
    // 2: IF mode, 10 MHz x 10.1 MHz
    dc = 0;
    restart();
    fork
      begin
        for (int i = 0; i < 100 * 16 * 20; i++) begin
          @(negedge clk);
          rf = 14'($rtoi(6000.0 * $cos(2.0 * PI * 10.0e6 * i / 125.0e6)));
          lo = 14'($rtoi(8000.0 * $cos(2.0 * PI * 10.1e6 * i / 125.0e6)));
        end
      end
    join
    parse(0, 0, s, 1);
    acc = 0.0; n = 0;
    for (int i = 150; i < s.size(); i++) begin acc += s[i] * s[i]; n++; end
    e = 6000.0 * 8000.0 / 2.0 / $sqrt(2.0) * GAIN;
    check(n > 100, "IF sample count");
    check($sqrt(acc / n) > e * 0.95 && $sqrt(acc / n) < e * 1.05, $sformatf("IF rms %f exp %f", $sqrt(acc / n), e));
    // 3: triggered bursts
    dc = 1; trg = 1; rf = 14'sd1000; burst = 2;
    restart();
    repeat (5000) @(posedge clk);
    check(beats.size() == 0, "no data before a trigger");
    trig = 1; repeat (20) @(posedge clk); trig = 0;
    repeat (100 * 16 * 3) @(posedge clk);
    check(beats.size() == 2 * (4 + P), $sformatf("burst 1 beats %0d", beats.size()));
    parse(1, 0, s, 0);
    beats.delete(); lasts.delete(); times.delete();
    trig = 1; repeat (20) @(posedge clk); trig = 0;
    repeat (100 * 16 * 3) @(posedge clk);
    check(beats.size() == 2 * (4 + P), $sformatf("burst 2 beats %0d", beats.size()));
    parse(2, 2, s, 0);
    check(tc == 2 && !act, "trigger count and idle after burst");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
