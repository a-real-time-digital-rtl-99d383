// drs_top: the digital receiver, both operating modes around one buffer.
//
// Clocking: everything runs on the 125 MHz master clock derived from the
// ADC data clock (the PLL itself is outside this design). rst_n is the
// processor-side reset; it clears the registers. Bit 0 of cfg word 0 is the
// master reset of the signal processing, bit 1 selects the mode:
//   0  FFT spectrometer on ADC channel 1 (adc_ch1): 2048 channels of
//      30.5 kHz, integrated over cfg word 1 spectra, each integration written
//      to buffer addresses 0..2047 and flagged by `finished`.
//   1  raw voltage recorder: channel 1 (RF) mixed with channel 2 (LO) or
//      with 1.0 (cfg0 bit 2, baseband), decimated to 1.25 MSPS, recorded
//      continuously or in bursts of cfg word 2 packets after a trigger edge
//      (cfg0 bit 3), written as 260-word packets into the buffer used as a
//      ring.
// The mode not selected is held in reset. The processor reads the 32 x 2048
// buffer through the second AXI4-Lite port and the registers through the
// first (map in drs_pkg). The ADC inputs are offset-binary codes.
// In the paper the two modes are separate firmware images sharing this
// structure; merging them behind a mode bit is this design's choice.
module drs_top
  import drs_pkg::*;
(
  input  logic             clk,        // 125 MHz master clock
  input  logic             rst_n,      // processor reset, active low
  input  logic [ADC_W-1:0] adc_ch1,    // RF / spectrometer input
  input  logic [ADC_W-1:0] adc_ch2,    // LO input of the recorder
  input  logic             trig_in,    // external trigger (asynchronous)
  input  axil_req_t        reg_req,    // cfg / sts registers
  output axil_rsp_t        reg_rsp,
  input  axil_req_t        buf_req,    // buffer reader
  output axil_rsp_t        buf_rsp
);
  logic               bus_rst, dsp_rst, ffts_rst, rtdr_rst;
  logic [31:0]        cfg [CFG_WORDS];
  logic [31:0]        sts [STS_WORDS];
  logic               mode_rtdr;
  logic signed [ADC_W-1:0] rf, lo;
  axis_t              ffts_axis, rtdr_axis, wr_axis;
  logic               wr_tready;
  logic               ffts_overrun, burst_active;
  logic [31:0]        spectra;
  logic [31:0]        frc, oc, tc, pc, t_frc, t_oc;
  logic               we, re, finished;
  logic [BRAM_AW-1:0] waddr, raddr, wptr;
  logic [31:0]        wdata, rdata, frames;
  logic               ffts_run;

  always_comb begin
    bus_rst   = !rst_n;
    mode_rtdr = cfg[CFG_CTRL][1];
    dsp_rst   = bus_rst || cfg[CFG_CTRL][0];
    ffts_rst  = dsp_rst || mode_rtdr;
    rtdr_rst  = dsp_rst || !mode_rtdr;
    wr_axis   = mode_rtdr ? rtdr_axis : ffts_axis;
  end

  always_ff @(posedge clk) ffts_run <= !ffts_rst;

  axi_cfg_sts u_regs (.clk, .rst(bus_rst), .req(reg_req), .rsp(reg_rsp), .cfg, .sts);

  adc_formatter #(.W(ADC_W)) u_fmt_ch1 (.clk, .rst(dsp_rst), .adc_raw(adc_ch1), .data(rf));
  adc_formatter #(.W(ADC_W)) u_fmt_ch2 (.clk, .rst(dsp_rst), .adc_raw(adc_ch2), .data(lo));

  spectrometer u_ffts (
    .clk, .rst(ffts_rst), .in_data(rf), .in_valid(ffts_run),
    .acc_len(cfg[CFG_ACCLEN]), .m_axis(ffts_axis), .m_tready(wr_tready || mode_rtdr),
    .overrun(ffts_overrun), .spectra);

  rtdr_core u_rtdr (
    .clk, .rst(rtdr_rst), .rf, .lo,
    .dc_mode(cfg[CFG_CTRL][2]), .triggered(cfg[CFG_CTRL][3]),
    .burst_pkts(cfg[CFG_BURST][15:0]), .trig_in,
    .m_axis(rtdr_axis), .m_tready(wr_tready || !mode_rtdr),
    .frc, .oc, .tc, .pc, .t_frc, .t_oc, .burst_active);

  axis_bram_writer #(.AW(BRAM_AW)) u_writer (
    .clk, .rst(dsp_rst), .s_axis(wr_axis), .s_tready(wr_tready),
    .bram_we(we), .bram_addr(waddr), .bram_wdata(wdata),
    .sts_addr(wptr), .finished, .frames);

  bram_dp #(.AW(BRAM_AW), .DW(BRAM_DW)) u_bram (
    .clk, .we, .wr_addr(waddr), .wr_data(wdata), .re, .rd_addr(raddr), .rd_data(rdata));

  axi_bram_reader #(.AW(BRAM_AW)) u_reader (
    .clk, .rst(bus_rst), .req(buf_req), .rsp(buf_rsp),
    .bram_re(re), .bram_addr(raddr), .bram_rdata(rdata));

  always_comb begin
    sts[STS_WRITER] = {finished, ffts_overrun, burst_active, 18'b0, wptr};
    sts[STS_FRAMES] = frames;
    sts[STS_TC]     = tc;
    sts[STS_TFRC]   = t_frc;
    sts[STS_TOC]    = t_oc;
    sts[STS_PC]     = pc;
    sts[STS_FRC]    = frc;
    sts[STS_OC]     = oc;
    sts[STS_SPECTRA] = spectra;
  end
endmodule
