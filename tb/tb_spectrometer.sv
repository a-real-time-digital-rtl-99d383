// tb_spectrometer: a 64-point, 8-tap spectrometer fed with a sine wave
// centred on channel 9 (plus a little noise), integrating 3 spectra. Each
// integration must be 32 words in channel order with tlast on the last
// word, the largest power must sit in channel 9 and exceed every channel
// more than two away by 30 dB, the integration must take 3*64 clocks, and
// doubling acc_len must double the power in channel 9 within 5 %.
module tb_spectrometer;
  import drs_pkg::*;
  localparam int N = 64, NC = N/2;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst = 1, iv, ovr;
  logic signed [13:0] x;
  logic [31:0] len;
  logic [31:0] spectra;
  axis_t m;
  longint spec [NC];
  int checks = 0, failures = 0, beat = 0, nspec = 0, cyc = 0, t_last = 0;
  longint peak_prev = 0;
  always #4 clk = ~clk;
  spectrometer #(.NFFT(N)) dut (.clk, .rst, .in_data(x), .in_valid(iv),
    .acc_len(len), .m_axis(m), .m_tready(1'b1), .overrun(ovr), .spectra);
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) begin
    cyc++;
    if (!rst && m.tvalid) begin
      spec[beat] = longint'(m.tdata);
      checks++;
      if (m.tlast != (beat == NC-1)) begin failures++; $display("tlast at %0d", beat); end
      beat++;
      if (beat == NC) begin
        int pk = 0;
        beat = 0;
        for (int c = 1; c < NC; c++) if (spec[c] > spec[pk]) pk = c;
        if (nspec >= 2) begin   // the first integrations hold the filter start-up
          checks++;
          if (pk != 9) begin failures++; $display("peak in channel %0d", pk); end
          for (int c = 0; c < NC; c++) if (c < 7 || c > 11) begin
            checks++;
            if (spec[c] * 1000 > spec[9]) begin failures++; $display("channel %0d: %0d vs %0d", c, spec[c], spec[9]); end
          end
          if (len == 3) begin
            checks++;
            if (t_last != 0 && cyc - t_last != 3 * N) begin failures++; $display("period %0d", cyc - t_last); end
          end
          if (nspec == 4) begin
            checks++;
            if (spec[9] * 100 < peak_prev * 2 * 95 || spec[9] * 100 > peak_prev * 2 * 105) begin
              failures++; $display("len 6: %0d, len 3: %0d", spec[9], peak_prev);
            end
          end
          peak_prev = spec[9];
        end
        t_last = cyc;
        nspec++;
      end
    end
  end
  initial begin
    iv = 0; x = 0; len = 3;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int i = 0; i < 3 * N * 8; i++) begin
      iv = 1;
      x = 14'($rtoi(6000.0 * $cos(2.0 * PI * 9.0 * i / N)) + $urandom_range(0, 8) - 4);
      @(posedge clk); #1;
      if (nspec == 4) len = 6;
    end
    for (int i = 0; i < 6 * N * 2; i++) begin
      x = 14'($rtoi(6000.0 * $cos(2.0 * PI * 9.0 * i / N)) + $urandom_range(0, 8) - 4);
      @(posedge clk); #1;
    end
    checks++;
    if (nspec < 7 || spectra != 32'(nspec) || ovr) begin failures++; $display("nspec %0d spectra %0d", nspec, spectra); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
