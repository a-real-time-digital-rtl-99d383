// axi_bram_reader: AXI4-Lite read access to the block RAM.
//
// A read request (araddr, arvalid) is accepted when no response is pending.
// The word address araddr[AW+1:2] goes to the RAM read port; the RAM answers
// one clock later and the word is returned with rvalid, held until rready.
// Read latency from arvalid&arready to rvalid is two clocks. Writes are
// accepted and answered with SLVERR, the buffer being read-only from this
// side. The block's role follows the paper; the AXI4-Lite protocol and its
// timing are this design's choice.
module axi_bram_reader
  import drs_pkg::*;
#(
  parameter int AW = 11
) (
  input  logic          clk,
  input  logic          rst,
  input  axil_req_t     req,
  output axil_rsp_t     rsp,
  output logic          bram_re,
  output logic [AW-1:0] bram_addr,
  input  logic [31:0]   bram_rdata
);
  logic busy;      // a read is in flight or waiting for rready
  logic wait_ram;  // RAM data arrives this cycle
  logic aw_seen, w_seen;
  logic rvalid, bvalid;
  logic [31:0] rdata;

  always_comb begin
    bram_re   = req.arvalid && !busy;
    bram_addr = req.araddr[AW+1:2];
    rsp = '{awready: !aw_seen, wready: !w_seen, bresp: RESP_SLVERR, bvalid: bvalid,
            arready: !busy, rdata: rdata, rresp: RESP_OKAY, rvalid: rvalid};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy       <= 1'b0;
      wait_ram   <= 1'b0;
      rvalid <= 1'b0;
      rdata  <= '0;
      aw_seen    <= 1'b0;
      w_seen     <= 1'b0;
      bvalid <= 1'b0;
    end else begin
      wait_ram <= bram_re;
      if (bram_re) busy <= 1'b1;
      if (wait_ram) begin
        rvalid <= 1'b1;
        rdata  <= bram_rdata;
      end
      if (rvalid && req.rready) begin
        rvalid <= 1'b0;
        busy       <= 1'b0;
      end
      // write channel: accept and reject
      if (req.awvalid && !aw_seen) aw_seen <= 1'b1;
      if (req.wvalid && !w_seen)   w_seen  <= 1'b1;
      if ((aw_seen || req.awvalid) && (w_seen || req.wvalid) && !bvalid) begin
        bvalid <= 1'b1;
      end
      if (bvalid && req.bready) begin
        bvalid <= 1'b0;
        aw_seen    <= 1'b0;
        w_seen     <= 1'b0;
      end
    end
  end

  // AXI rule: a response once valid stays valid and stable until taken.
  a_rvalid_hold: assert property (@(posedge clk) disable iff (rst)
    rvalid && !req.rready |=> rvalid && $stable(rdata));
endmodule
