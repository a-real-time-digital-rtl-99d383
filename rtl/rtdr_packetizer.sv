// rtdr_packetizer: frames recorded samples into packets for the buffer.
//
// Every PKT_SAMPLES recorded samples form one packet. Before the first
// sample of a packet the block sends HDR_WORDS = 4 header words, sampled at
// that first sample:
//   word 0  PC  packet counter (packets framed before this one)
//   word 1  TC  trigger counter
//   word 2  FRC free-running counter
//   word 3  OC  FRC overflow counter
// followed by the samples; tlast marks the packet's last sample. pkt_start
// pulses when a header is taken, to advance the packet counter. Beats leave
// from a register and wait for tready. The block holds one sample, so a new
// sample must not arrive while it is still sending the header and the
// held sample (at 1.25 MSPS samples are 100 clocks apart; the check is an
// assertion). Putting the counters next to the data follows the paper; the
// header layout is this design's.
module rtdr_packetizer
  import drs_pkg::*;
#(
  parameter int PKT_SAMPLES = 256,
  parameter int NHDR        = HDR_WORDS
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] s_data,
  input  logic        s_valid,
  input  logic [31:0] pc,
  input  logic [31:0] tc,
  input  logic [31:0] frc,
  input  logic [31:0] oc,
  output axis_t       m_axis,
  input  logic        m_tready,
  output logic        pkt_start
);
  localparam int SW = $clog2(PKT_SAMPLES);

  logic [31:0]       hdr [NHDR];
  logic [$clog2(NHDR+1)-1:0] hcnt;   // header words left to send
  logic [31:0]       held;
  logic              held_v, held_last;
  logic [SW-1:0]     scnt;
  logic              can_send;

  always_comb can_send = !m_axis.tvalid || m_tready;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < NHDR; i++) hdr[i] <= '0;
      hcnt      <= '0;
      held      <= '0;
      held_v    <= 1'b0;
      held_last <= 1'b0;
      scnt      <= '0;
      m_axis    <= '0;
      pkt_start <= 1'b0;
    end else begin
      pkt_start <= 1'b0;
      if (s_valid) begin
        held      <= s_data;
        held_v    <= 1'b1;
        held_last <= (scnt == SW'(PKT_SAMPLES-1));
        scnt      <= scnt + 1'b1;
        if (scnt == 0) begin
          hdr[0]    <= pc;
          hdr[1]    <= tc;
          hdr[2]    <= frc;
          hdr[3]    <= oc;
          hcnt      <= ($clog2(NHDR+1))'(NHDR);
          pkt_start <= 1'b1;
        end
      end
      if (can_send) begin
        if (hcnt != 0) begin
          m_axis.tvalid <= 1'b1;
          m_axis.tdata  <= hdr[NHDR - int'(hcnt)];
          m_axis.tlast  <= 1'b0;
          hcnt          <= hcnt - 1'b1;
        end else if (held_v && !s_valid) begin
          m_axis.tvalid <= 1'b1;
          m_axis.tdata  <= held;
          m_axis.tlast  <= held_last;
          held_v        <= 1'b0;
        end else begin
          m_axis.tvalid <= 1'b0;
          m_axis.tlast  <= 1'b0;
        end
      end
    end
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (rst) s_valid |-> !held_v)
    else $error("rtdr_packetizer: sample arrived before the previous one was sent");
  a_stream_hold: assert property (@(posedge clk) disable iff (rst)
    m_axis.tvalid && !m_tready |=> m_axis.tvalid && $stable(m_axis.tdata));
endmodule
