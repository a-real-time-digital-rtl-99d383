// tb_vector_acc: 16 channels arriving in bit-reversed order, integration
// lengths 3, 1 and 2, random tready. Each integration must leave as 16 words
// in channel order with tlast on the last, holding the saturated sum of
// (power >> 6) over its spectra; `spectra` must count the integrations.
// Some inputs are large enough to saturate the 32-bit sum.
module tb_vector_acc;
  import drs_pkg::*;
  localparam int NC = 16;
  logic clk = 0, rst = 1, iv, tready, ovr;
  logic [36:0] pw;
  logic [3:0] ch;
  logic [31:0] len;
  logic [31:0] spectra;
  axis_t m;
  longint model [NC];
  longint expq [$];
  int checks = 0, failures = 0, beats = 0;
  always #4 clk = ~clk;
  vector_acc #(.NCHAN(NC)) dut (.clk, .rst, .in_pow(pw), .in_chan(ch), .in_valid(iv), .acc_len(len),
    .m_axis(m), .m_tready(tready), .overrun(ovr), .spectra);
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) tready <= $urandom_range(0, 3) != 0;
  always @(posedge clk) if (!rst && m.tvalid && tready) begin
    checks++;
    if (expq.size() == 0 || longint'(m.tdata) != expq[0] || m.tlast != (beats % NC == NC-1)) begin
      failures++; $display("beat %0d: %0d exp %0d", beats, m.tdata, expq.size() ? expq[0] : -1);
    end
    if (expq.size()) void'(expq.pop_front());
    beats++;
  end
  task automatic integrate(input int n, input bit big);
    logic [36:0] vals [8][NC];
    for (int c = 0; c < NC; c++) model[c] = 0;
    for (int s = 0; s < n; s++)
      for (int c = 0; c < NC; c++) begin
        vals[s][c] = (big && c == 3) ? 37'h1f_ffff_ffff : 37'($urandom_range(0, 1 << 30));
        model[c] = model[c] + (longint'(vals[s][c]) >> 6);
        if (model[c] > 64'hffffffff) model[c] = 64'hffffffff;
      end
    for (int c = 0; c < NC; c++) expq.push_back(model[c]);
    len = 32'(n);
    for (int s = 0; s < n; s++) begin
      for (int k = 0; k < NC; k++) begin
        iv = 1;
        ch = {k[0], k[1], k[2], k[3]};
        pw = vals[s][ch];
        @(posedge clk); #1;
        iv = 0;
        repeat ($urandom_range(0, 2)) @(posedge clk); #1;
      end
      repeat (40) @(posedge clk); #1;   // leave room for the readout
    end
  endtask
  initial begin
    iv = 0; pw = 0; ch = 0; len = 3;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    integrate(3, 0);
    integrate(1, 1);
    integrate(2, 1);
    integrate(4, 0);
    repeat (100) @(posedge clk);
    checks++;
    if (expq.size() != 0 || spectra != 4 || ovr) begin failures++; $display("left %0d spectra %0d ovr %0d", expq.size(), spectra, ovr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
