// rtdr_core: the real time data recorder chain.
//
//   rf, lo (2's complement, 125 MSPS)
//     -> mixer: rf * lo, or rf * 1.0 in baseband (dc) mode     28 bit
//     -> CIC decimator by 50 -> 2.5 MSPS                        24 bit
//     -> 256-tap CIC-compensating FIR, decimate by 2 -> 1.25 MSPS, 32 bit
//     -> trigger gate: continuous, or bursts after a trigger edge
//     -> packetizer: 4 header words + 256 samples per packet -> AXI stream
// The recorded band is 0..625 kHz in baseband mode and f_lo..f_lo+625 kHz
// in IF mode; one sample every 800 ns. trigger_time keeps the FRC, OC, TC
// and PC counters that go into the packet headers and to the status
// registers. Mode inputs should only change while rst is high.
// The chain and its rates are the paper's; the widths and the packet
// format are this design's.
module rtdr_core
  import drs_pkg::*;
#(
  parameter int W           = 14,
  parameter int R           = 50,
  parameter int FIR_TAPS    = 256,
  parameter int PKT_SAMPLES = 256,
  parameter int LEN_W       = 16
) (
  input  logic                clk,
  input  logic                rst,
  input  logic signed [W-1:0] rf,
  input  logic signed [W-1:0] lo,
  input  logic                dc_mode,
  input  logic                triggered,
  input  logic [LEN_W-1:0]    burst_pkts,
  input  logic                trig_in,
  output axis_t               m_axis,
  input  logic                m_tready,
  output logic [31:0]         frc,
  output logic [31:0]         oc,
  output logic [31:0]         tc,
  output logic [31:0]         pc,
  output logic [31:0]         t_frc,
  output logic [31:0]         t_oc,
  output logic                burst_active
);
  logic signed [2*W-1:0] mix;
  logic signed [23:0]    cic_d;
  logic                  cic_v;
  logic signed [31:0]    fir_d;
  logic                  fir_v;
  logic                  rec_v, trig_edge, pkt_start;
  logic                  run;

  always_ff @(posedge clk) run <= !rst;

  mixer #(.W(W)) u_mix (.clk, .rst, .dc_mode, .rf, .lo, .prod(mix));

  cic_decim #(.R(R), .N(3), .IN_W(2*W), .OUT_W(24)) u_cic (
    .clk, .rst, .in_data(mix), .in_valid(run), .out_data(cic_d), .out_valid(cic_v));

  fir_halfband #(.TAPS(FIR_TAPS), .IN_W(24), .OUT_W(32), .CIC_R(R), .CIC_N(3)) u_fir (
    .clk, .rst, .in_data(cic_d), .in_valid(cic_v), .out_data(fir_d), .out_valid(fir_v));

  trig_gen #(.PKT_SAMPLES(PKT_SAMPLES), .LEN_W(LEN_W)) u_trig (
    .clk, .rst, .trig_in, .triggered, .burst_pkts, .in_valid(fir_v),
    .rec_valid(rec_v), .trig_edge, .active(burst_active));

  trigger_time u_time (
    .clk, .rst, .trig_edge, .pkt_start, .frc, .oc, .tc, .pc, .t_frc, .t_oc);

  rtdr_packetizer #(.PKT_SAMPLES(PKT_SAMPLES)) u_pkt (
    .clk, .rst, .s_data(fir_d), .s_valid(rec_v), .pc, .tc, .frc, .oc,
    .m_axis, .m_tready, .pkt_start);
endmodule
