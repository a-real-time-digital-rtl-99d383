// trig_gen: trigger detection, burst gate and the record-valid multiplexer.
//
// The external trigger passes a two-flop synchronizer; a low-to-high change
// gives a one-clock trig_edge pulse (two to three clocks after the pin).
// In triggered mode an edge seen while idle opens a burst: the next
// burst_pkts * PKT_SAMPLES input samples are passed (rec_valid), then the
// gate closes and the block waits for the next edge. Edges during a burst
// are still reported on trig_edge but do not extend it. In continuous mode
// every sample passes. burst_pkts = 0 acts as 1. rec_valid is combinational
// from in_valid. The rising-edge start, the programmable burst and the
// triggered/continuous choice are the paper's; programming the burst in
// whole packets and the synchronizer are this design's choices.
module trig_gen #(
  parameter int PKT_SAMPLES = 256,
  parameter int LEN_W       = 16
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             trig_in,      // asynchronous trigger pin
  input  logic             triggered,    // 1: triggered, 0: continuous
  input  logic [LEN_W-1:0] burst_pkts,
  input  logic             in_valid,     // a new recorder sample
  output logic             rec_valid,    // sample to record
  output logic             trig_edge,
  output logic             active        // a burst is running
);
  localparam int SW = $clog2(PKT_SAMPLES);

  logic [2:0]       sync;                // two synchronizer flops + previous
  logic [SW-1:0]    scnt;                // samples in this packet
  logic [LEN_W-1:0] pcnt;                // packets left after this one

  always_comb begin
    trig_edge = sync[1] && !sync[2];
    rec_valid = in_valid && (triggered ? active : 1'b1);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sync   <= '0;
      scnt   <= '0;
      pcnt   <= '0;
      active <= 1'b0;
    end else begin
      sync <= {sync[1:0], trig_in};
      if (active && in_valid) begin
        scnt <= scnt + 1'b1;
        if (scnt == SW'(PKT_SAMPLES-1)) begin
          if (pcnt == 0) active <= 1'b0;
          else           pcnt   <= pcnt - 1'b1;
        end
      end
      if (trig_edge && !active && triggered) begin
        active <= 1'b1;
        scnt   <= '0;
        pcnt   <= (burst_pkts == 0) ? '0 : burst_pkts - 1'b1;
      end
    end
  end
endmodule
