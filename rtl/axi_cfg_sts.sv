// axi_cfg_sts: the configuration and status registers of the receiver.
//
// An AXI4-Lite subordinate. Byte addresses below 0x100 reach the CFG_WORDS
// configuration words, which the processor writes and reads back and which
// drive the programmable logic (master reset, mode, integration length,
// burst length). Byte addresses from 0x100 reach the STS_WORDS status words,
// which are inputs sampled live by the read (BRAM pointer, finished flag,
// counters); writes there are ignored. Write address and data may arrive in
// either order; the register is written in the cycle both are present and
// the response follows one clock later. Read data is valid one clock after
// the address handshake. All registers reset to zero. The two register sets and their
// purpose follow the paper; the addresses and the bus are this design's.
module axi_cfg_sts
  import drs_pkg::*;
#(
  parameter int NCFG = CFG_WORDS,
  parameter int NSTS = STS_WORDS
) (
  input  logic        clk,
  input  logic        rst,
  input  axil_req_t   req,
  output axil_rsp_t   rsp,
  output logic [31:0] cfg [NCFG],
  input  logic [31:0] sts [NSTS]
);
  logic        aw_seen, w_seen;
  logic [15:0] aw_addr;
  logic [31:0] w_data;
  logic [3:0]  w_strb;
  logic        do_write;
  logic [15:0] waddr;
  logic [31:0] wdata;
  logic [3:0]  wstrb;
  logic        awready, wready, arready, bvalid, rvalid;
  logic [31:0] rdata;

  always_comb begin
    awready = !aw_seen && !bvalid;
    wready  = !w_seen && !bvalid;
    arready = !rvalid;
    rsp = '{awready: awready, wready: wready, bresp: RESP_OKAY, bvalid: bvalid,
            arready: arready, rdata: rdata, rresp: RESP_OKAY, rvalid: rvalid};
    waddr = aw_seen ? aw_addr : req.awaddr;
    wdata = w_seen  ? w_data  : req.wdata;
    wstrb = w_seen  ? w_strb  : req.wstrb;
    do_write = (aw_seen || (req.awvalid && awready)) &&
               (w_seen  || (req.wvalid  && wready));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      aw_seen    <= 1'b0;
      w_seen     <= 1'b0;
      aw_addr    <= '0;
      w_data     <= '0;
      w_strb     <= '0;
      bvalid <= 1'b0;
      rvalid <= 1'b0;
      rdata  <= '0;
      for (int i = 0; i < NCFG; i++) cfg[i] <= '0;
    end else begin
      if (do_write) begin
        aw_seen    <= 1'b0;
        w_seen     <= 1'b0;
        bvalid <= 1'b1;
        if (!waddr[8] && int'(waddr[7:2]) < NCFG)
          for (int b = 0; b < 4; b++)
            if (wstrb[b]) cfg[int'(waddr[7:2]) % NCFG][8*b +: 8] <= wdata[8*b +: 8];
      end else begin
        if (req.awvalid && awready) begin aw_seen <= 1'b1; aw_addr <= req.awaddr; end
        if (req.wvalid && wready)   begin w_seen  <= 1'b1; w_data <= req.wdata; w_strb <= req.wstrb; end
      end
      if (bvalid && req.bready) bvalid <= 1'b0;

      if (req.arvalid && arready) begin
        rvalid <= 1'b1;
        if (req.araddr[8])
          rdata <= (int'(req.araddr[7:2]) < NSTS) ? sts[int'(req.araddr[7:2]) % NSTS] : 32'h0;
        else
          rdata <= (int'(req.araddr[7:2]) < NCFG) ? cfg[int'(req.araddr[7:2]) % NCFG] : 32'h0;
      end else if (rvalid && req.rready) begin
        rvalid <= 1'b0;
      end
    end
  end

  a_bvalid_hold: assert property (@(posedge clk) disable iff (rst)
    bvalid && !req.bready |=> bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (rst)
    rvalid && !req.rready |=> rvalid && $stable(rdata));
endmodule
