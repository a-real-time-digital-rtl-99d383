// axis_bram_writer: writes an AXI stream into the block RAM.
//
// Every accepted beat is written at the current address pointer, which then
// increments and wraps at 2**AW. The writer never stalls (tready is always 1
// once out of reset). The beat that carries tlast completes a frame: it sets
// `finished`, increments `frames`, and the next beat clears `finished` again.
// For the spectrometer a frame is one 2048-channel spectrum, which lands
// exactly at addresses 0..2047; for the recorder a frame is one packet and
// the buffer is a ring that the processor follows through `sts_addr`.
// The write pointer and finished flag follow the paper's description of the
// status register; the frame counter and the ring behaviour are this
// design's choices.
module axis_bram_writer
  import drs_pkg::*;
#(
  parameter int AW = 11
) (
  input  logic          clk,
  input  logic          rst,
  input  axis_t         s_axis,
  output logic          s_tready,
  output logic          bram_we,
  output logic [AW-1:0] bram_addr,
  output logic [31:0]   bram_wdata,
  output logic [AW-1:0] sts_addr,   // address of the next word to write
  output logic          finished,
  output logic [31:0]   frames
);
  logic beat;

  always_comb begin
    beat       = s_axis.tvalid && s_tready;
    bram_we    = beat;
    bram_addr  = sts_addr;
    bram_wdata = s_axis.tdata;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      s_tready <= 1'b0;
      sts_addr <= '0;
      finished <= 1'b0;
      frames   <= '0;
    end else begin
      s_tready <= 1'b1;
      if (beat) begin
        sts_addr <= sts_addr + 1'b1;
        finished <= s_axis.tlast;
        if (s_axis.tlast) frames <= frames + 1;
      end
    end
  end
endmodule
