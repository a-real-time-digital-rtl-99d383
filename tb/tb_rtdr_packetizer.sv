// tb_rtdr_packetizer: 8-sample packets, samples every 30 clocks, random
// tready. Every packet on the stream must be PC, TC, FRC, OC as they were
// at its first sample, then its 8 samples in order with tlast on the last.
module tb_rtdr_packetizer;
  import drs_pkg::*;
  localparam int P = 8;
  logic clk = 0, rst = 1, sv, tready, ps;
  logic [31:0] sd, pc, tc, frc, oc;
  axis_t m;
  int checks = 0, failures = 0;
  logic [31:0] expq [$];
  logic lastq [$];
  always #4 clk = ~clk;
  rtdr_packetizer #(.PKT_SAMPLES(P)) dut (.clk, .rst, .s_data(sd), .s_valid(sv), .pc, .tc, .frc, .oc,
    .m_axis(m), .m_tready(tready), .pkt_start(ps));
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) begin
    frc <= rst ? 0 : frc + 1;
    if (rst) pc <= 0; else if (ps) pc <= pc + 1;
    tready <= $urandom_range(0, 2) != 0;
  end
  always @(posedge clk) if (!rst && m.tvalid && tready) begin
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected beat"); end
    else begin
      if (m.tdata != expq[0] || m.tlast != lastq[0]) begin
        failures++; $display("beat %h/%0d exp %h/%0d", m.tdata, m.tlast, expq[0], lastq[0]);
      end
      void'(expq.pop_front()); void'(lastq.pop_front());
    end
  end
  initial begin
    int n = 0;
    sv = 0; sd = 0; tc = 7; oc = 3;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    repeat (5) @(posedge clk);
    for (int i = 0; i < 60; i++) begin
      #1;
      sv = 1; sd = $urandom; tc = tc + 32'($urandom_range(0, 1));
      if (n % P == 0) begin
        expq.push_back(32'(n / P)); lastq.push_back(0);
        expq.push_back(tc); lastq.push_back(0);
        expq.push_back(frc); lastq.push_back(0);
        expq.push_back(oc); lastq.push_back(0);
      end
      expq.push_back(sd); lastq.push_back(n % P == P-1);
      n++;
      @(posedge clk); #1 sv = 0;
      repeat (29) @(posedge clk);
    end
    repeat (20) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d beats missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
