// tb_trigger_time: runs the counters with an 8-bit FRC so that it wraps;
// checks FRC, OC, TC, PC and the trigger time stamps against a model.
module tb_trigger_time;
  logic clk = 0, rst = 1, te, ps;
  logic [7:0] frc, t_frc;
  logic [31:0] oc, tc, pc, t_oc;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;
  trigger_time #(.FRC_W(8)) dut (.clk, .rst, .trig_edge(te), .pkt_start(ps),
    .frc, .oc, .tc, .pc, .t_frc, .t_oc);
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int m_frc = 0, m_oc = 0, m_tc = 0, m_pc = 0, m_tf = 0, m_to = 0;
    te = 0; ps = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int i = 0; i < 3000; i++) begin
      te = ($urandom_range(0, 40) == 0);
      ps = ($urandom_range(0, 10) == 0);
      @(posedge clk); #1;
      if (te) begin m_tc++; m_tf = m_frc; m_to = m_oc; end
      if (ps) m_pc++;
      if (m_frc == 255) begin m_frc = 0; m_oc++; end else m_frc++;
      checks++;
      if (int'(frc) != m_frc || int'(oc) != m_oc || int'(tc) != m_tc || int'(pc) != m_pc ||
          int'(t_frc) != m_tf || int'(t_oc) != m_to) begin
        failures++;
        $display("cycle %0d: frc %0d/%0d oc %0d/%0d tc %0d/%0d pc %0d/%0d", i, frc, m_frc, oc, m_oc, tc, m_tc, pc, m_pc);
      end
    end
    checks++;
    if (m_oc < 10) failures++;   // the overflow path was exercised
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
