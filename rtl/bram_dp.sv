// bram_dp: simple dual-port block RAM, 32 x 2048 by default.
//
// Port A writes (from the AXI stream writer), port B reads (for the AXI
// reader) with one clock of latency: rd_data holds mem[rd_addr] of the
// previous cycle. A read and a write to the same address in one cycle return
// the old word. Size from the paper's block diagrams; the port arrangement is
// this design's choice.
module bram_dp #(
  parameter int AW = 11,
  parameter int DW = 32
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] wr_addr,
  input  logic [DW-1:0] wr_data,
  input  logic          re,
  input  logic [AW-1:0] rd_addr,
  output logic [DW-1:0] rd_data
);
  logic [DW-1:0] mem [1<<AW];

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= wr_data;
    if (re) rd_data <= mem[rd_addr];
  end
endmodule
