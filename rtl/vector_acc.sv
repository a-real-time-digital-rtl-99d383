// vector_acc: integrates ACC_LEN power spectra channel by channel.
//
// Each input carries the power of one channel (any order; every channel
// exactly once per spectrum, NCHAN inputs make one spectrum, counted from
// reset). The power is shifted right by POW_SHIFT and added, saturating at
// 2**OUT_W-1, into one of two accumulator banks at the channel's address;
// the first spectrum of an integration overwrites instead of adding. After
// acc_len spectra (acc_len = 0 acts as 1; a new value applies at once,
// compared with the spectra already summed) the banks swap and the finished
// bank is read out as an AXI stream in channel order 0..NCHAN-1, tlast on
// the last channel, while the other bank accumulates the next integration.
// tvalid is the "dv" of the paper and tdata its Pow_spec[31:0]. The stream
// honours tready; if a readout is still running when the banks swap again
// the sticky `overrun` flag is set. `spectra` counts completed integrations.
// The programmable integration, dv and the 32-bit output are the paper's;
// the two banks, the shift and the saturation are this design's choices.
module vector_acc
  import drs_pkg::*;
#(
  parameter int NCHAN     = 2048,
  parameter int IN_W      = 37,
  parameter int OUT_W     = 32,
  parameter int POW_SHIFT = 6,
  parameter int LEN_W     = 32
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic [IN_W-1:0]           in_pow,
  input  logic [$clog2(NCHAN)-1:0]  in_chan,
  input  logic                      in_valid,
  input  logic [LEN_W-1:0]          acc_len,
  output axis_t                     m_axis,
  input  logic                      m_tready,
  output logic                      overrun,
  output logic [31:0]               spectra
);
  localparam int CW = $clog2(NCHAN);
  localparam logic [OUT_W:0] MAXV = {1'b0, {OUT_W{1'b1}}};

  logic [OUT_W-1:0] bank [2][NCHAN];
  logic             wb;                 // bank being accumulated
  logic [CW-1:0]    cnt;                // channels seen in this spectrum
  logic [LEN_W-1:0] nspec;              // spectra done in this integration
  logic             rd_active;
  logic [CW-1:0]    rd_addr;
  logic [IN_W-1:0]  pw;
  logic [OUT_W:0]   sum;
  logic             last_in_spec, last_spec;

  always_comb begin
    pw  = in_pow >> POW_SHIFT;
    sum = (nspec == 0) ? {(OUT_W+1){1'b0}} : {1'b0, bank[wb][in_chan]};
    sum = (pw > IN_W'(MAXV)) ? MAXV : sum + (OUT_W+1)'(pw);
    if (sum > MAXV) sum = MAXV;
    last_in_spec = (cnt == CW'(NCHAN-1));
    last_spec    = (nspec + 1'b1 >= acc_len) || (acc_len == 0);
  end

  always_ff @(posedge clk) begin
    if (in_valid) bank[wb][in_chan] <= sum[OUT_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wb        <= 1'b0;
      cnt       <= '0;
      nspec     <= '0;
      rd_active <= 1'b0;
      rd_addr   <= '0;
      m_axis    <= '0;
      overrun   <= 1'b0;
      spectra   <= '0;
    end else begin
      // accumulate
      if (in_valid) begin
        cnt <= cnt + 1'b1;
        if (last_in_spec) begin
          if (last_spec) begin
            nspec   <= '0;
            wb      <= !wb;
            spectra <= spectra + 1;
            if (rd_active) overrun <= 1'b1;
            rd_active <= 1'b1;
            rd_addr   <= '0;
          end else begin
            nspec <= nspec + 1'b1;
          end
        end
      end
      // read out the bank not being accumulated
      if (!m_axis.tvalid || m_tready) begin
        if (rd_active && !(in_valid && last_in_spec && last_spec)) begin
          m_axis.tvalid <= 1'b1;
          m_axis.tdata  <= 32'(bank[!wb][rd_addr]);
          m_axis.tlast  <= (rd_addr == CW'(NCHAN-1));
          rd_addr       <= rd_addr + 1'b1;
          if (rd_addr == CW'(NCHAN-1)) rd_active <= 1'b0;
        end else begin
          m_axis.tvalid <= 1'b0;
          m_axis.tlast  <= 1'b0;
        end
      end
    end
  end

  a_stream_hold: assert property (@(posedge clk) disable iff (rst)
    m_axis.tvalid && !m_tready |=> m_axis.tvalid && $stable(m_axis.tdata));
endmodule
