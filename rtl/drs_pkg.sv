// drs_pkg: types and constants shared by the digital receiver.
//
// The receiver samples one or two 14-bit ADC channels at 125 MHz and runs
// either a 4096-point streaming FFT spectrometer (FFTS) or a decimating raw
// voltage recorder (RTDR). Both modes deliver 32-bit words over an AXI stream
// into a 32 x 2048 buffer that the processor reads over AXI4-Lite.
// The sample rate, ADC width, FFT length, buffer size and decimation
// factors follow the paper; the bus structs and register map are this
// design's own choice.
package drs_pkg;

  localparam int ADC_W      = 14;     // ADC word width
  localparam int NFFT       = 4096;   // FFT length
  localparam int NCHAN      = NFFT/2; // positive-frequency channels
  localparam int BRAM_AW    = 11;     // 2048-word buffer
  localparam int BRAM_DW    = 32;     // 32-bit words
  localparam int CIC_R      = 50;     // CIC decimation
  localparam int PKT_SAMPLES = 256;   // samples per recorder packet
  localparam int HDR_WORDS  = 4;      // recorder packet header words

  // Register map (word index) of the cfg/sts block.
  localparam int CFG_CTRL   = 0;  // [0] master reset, [1] mode (1=RTDR), [2] dc-mode, [3] triggered
  localparam int CFG_ACCLEN = 1;  // FFTS: spectra per integration
  localparam int CFG_BURST  = 2;  // RTDR: packets per triggered burst
  localparam int CFG_WORDS  = 4;

  localparam int STS_WRITER = 0;  // [31] finished, [30] FFTS overrun, [29] burst active, [10:0] write pointer
  localparam int STS_FRAMES = 1;  // frames (spectra or packets) written
  localparam int STS_TC     = 2;  // trigger count
  localparam int STS_TFRC   = 3;  // FRC at the last trigger
  localparam int STS_TOC    = 4;  // OC at the last trigger
  localparam int STS_PC     = 5;  // packet count
  localparam int STS_FRC    = 6;  // FRC now
  localparam int STS_OC     = 7;  // OC now
  localparam int STS_SPECTRA = 8; // FFTS integrations completed
  localparam int STS_WORDS  = 9;

  // 32-bit AXI stream beat (tready travels separately).
  typedef struct packed {
    logic [31:0] tdata;
    logic        tvalid;
    logic        tlast;
  } axis_t;

  // AXI4-Lite, 32-bit data, 16-bit byte address. Manager -> subordinate.
  typedef struct packed {
    logic [15:0] awaddr;
    logic        awvalid;
    logic [31:0] wdata;
    logic [3:0]  wstrb;
    logic        wvalid;
    logic        bready;
    logic [15:0] araddr;
    logic        arvalid;
    logic        rready;
  } axil_req_t;

  // Subordinate -> manager.
  typedef struct packed {
    logic        awready;
    logic        wready;
    logic [1:0]  bresp;
    logic        bvalid;
    logic        arready;
    logic [31:0] rdata;
    logic [1:0]  rresp;
    logic        rvalid;
  } axil_rsp_t;

  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;

endpackage
