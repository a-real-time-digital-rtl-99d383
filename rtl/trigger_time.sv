// trigger_time: the recorder's time-keeping counters.
//
//   FRC  free-running counter, +1 every 125 MHz clock since reset
//   OC   overflow counter, +1 each time FRC wraps from all ones to zero
//   TC   trigger counter, +1 per trigger rising edge (trig_edge pulse)
//   PC   packet counter, +1 per packet framed (pkt_start pulse)
// On a trigger edge the current FRC and OC are also latched (t_frc, t_oc),
// so the processor can compute the time between triggers and the time of
// each trigger since reset: (OC * 2**FRC_W + FRC) / 125 MHz.
// Counters update on the clock edge after their event. The four counters
// and the 32-bit OC are the paper's; the other widths and the trigger time
// stamp registers are this design's.
module trigger_time #(
  parameter int FRC_W = 32,
  parameter int OC_W  = 32,
  parameter int TC_W  = 32,
  parameter int PC_W  = 32
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             trig_edge,
  input  logic             pkt_start,
  output logic [FRC_W-1:0] frc,
  output logic [OC_W-1:0]  oc,
  output logic [TC_W-1:0]  tc,
  output logic [PC_W-1:0]  pc,
  output logic [FRC_W-1:0] t_frc,
  output logic [OC_W-1:0]  t_oc
);
  always_ff @(posedge clk) begin
    if (rst) begin
      frc   <= '0;
      oc    <= '0;
      tc    <= '0;
      pc    <= '0;
      t_frc <= '0;
      t_oc  <= '0;
    end else begin
      frc <= frc + 1'b1;
      if (&frc) oc <= oc + 1'b1;
      if (trig_edge) begin
        tc    <= tc + 1'b1;
        t_frc <= frc;
        t_oc  <= oc;
      end
      if (pkt_start) pc <= pc + 1'b1;
    end
  end
endmodule
