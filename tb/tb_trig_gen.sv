// tb_trig_gen: samples every 4 clocks, 8-sample packets. Triggered mode:
// after an edge exactly burst_pkts*8 samples pass, edges during a burst do
// not extend it, no sample passes while idle; burst 0 gives one packet.
// Continuous mode: every sample passes.
module tb_trig_gen;
  localparam int P = 8;
  logic clk = 0, rst = 1, trig = 0, trg_mode, iv, rv, te, act;
  logic [15:0] burst;
  int checks = 0, failures = 0, passed = 0, edges = 0;
  always #4 clk = ~clk;
  trig_gen #(.PKT_SAMPLES(P)) dut (.clk, .rst, .trig_in(trig), .triggered(trg_mode),
    .burst_pkts(burst), .in_valid(iv), .rec_valid(rv), .trig_edge(te), .active(act));
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rv) passed++;
    if (te && !rst) edges++;
  end
  always_comb iv = !rst && (cyc % 4 == 0);
  task automatic pulse(); trig = 1; repeat (10) @(posedge clk); trig = 0; repeat (10) @(posedge clk); endtask
  task automatic expect_count(input int e, input string what);
    checks++;
    if (passed != e) begin failures++; $display("%s: passed %0d exp %0d", what, passed, e); end
  endtask
  initial begin
    trg_mode = 1; burst = 2;
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (200) @(posedge clk);
    expect_count(0, "idle");
    pulse();
    repeat (30) @(posedge clk);
    pulse();                           // inside the burst: ignored
    repeat (200) @(posedge clk);
    expect_count(2*P, "burst of 2");
    checks++; if (edges != 2 || act) begin failures++; $display("edges %0d active %0d", edges, act); end
    passed = 0; burst = 0;
    pulse();
    repeat (200) @(posedge clk);
    expect_count(P, "burst 0");
    passed = 0; burst = 5;
    pulse();
    repeat (400) @(posedge clk);
    expect_count(5*P, "burst of 5");
    passed = 0; trg_mode = 0;
    repeat (400) @(posedge clk);
    expect_count(100, "continuous");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
