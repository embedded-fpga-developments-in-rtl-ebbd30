// efpga_pkg: types and constants shared by the 28nm eFPGA ASIC digital core.
//
// The core is a register-access path (an AXI-Lite crossbar feeding an eFPGA
// configuration/status endpoint and a version endpoint) plus a FABulous-style
// eFPGA with 64-bit AXI streams in and out.  This package holds the AXI-Lite
// and AXI-Stream bundles as packed structs, the response codes, the
// configuration/status register offsets, the bitstream personality codes of the
// fabric model, and the fixed-point format of the pileup classifier.
//
// From the paper: 32-bit register buses, 2 buses into and 4 buses out of the
// eFPGA, 64-bit AXI streams, ap_fixed<28,19> classifier arithmetic.  This
// design's own choices: every register offset, the bitstream word layout and
// the personality codes.
package efpga_pkg;

  // ---------------------------------------------------------------- AXI-Lite
  typedef logic [1:0] axi_resp_t;
  localparam axi_resp_t RESP_OKAY   = 2'b00;
  localparam axi_resp_t RESP_SLVERR = 2'b10;
  localparam axi_resp_t RESP_DECERR = 2'b11;

  // master -> slave
  typedef struct packed {
    logic [31:0] awaddr;
    logic        awvalid;
    logic [31:0] wdata;
    logic [3:0]  wstrb;
    logic        wvalid;
    logic        bready;
    logic [31:0] araddr;
    logic        arvalid;
    logic        rready;
  } axil_req_t;

  // slave -> master
  typedef struct packed {
    logic        awready;
    logic        wready;
    axi_resp_t   bresp;
    logic        bvalid;
    logic        arready;
    logic [31:0] rdata;
    axi_resp_t   rresp;
    logic        rvalid;
  } axil_rsp_t;

  // ------------------------------------------------------------- AXI-Stream
  // 64-bit stream beat; tready travels separately in the opposite direction.
  typedef struct packed {
    logic [63:0] tdata;
    logic [7:0]  tkeep;
    logic        tlast;
    logic        tvalid;
  } axis64_t;

  // ------------------------------------------- config/status register map
  // Byte offsets inside the eFPGA config/status endpoint.
  localparam logic [11:0] CS_BITSTREAM = 12'h000; // W : push one bitstream word
  localparam logic [11:0] CS_CTRL      = 12'h004; // W : bit0 start load, bit1 finish load
  localparam logic [11:0] CS_STATUS    = 12'h008; // R : bit0 configured, [31:16] words loaded
  localparam logic [11:0] CS_TO_FAB    = 12'h010; // RW: 0x010 + 4*k, host -> eFPGA bus k
  localparam logic [11:0] CS_FROM_FAB  = 12'h020; // R : 0x020 + 4*k, eFPGA -> host bus k

  // ---------------------------------------- fabric model bitstream layout
  // Word 0 of a bitstream names the user design ("personality") it holds.
  typedef enum logic [7:0] {
    PERS_NONE     = 8'h00,
    PERS_COUNTER  = 8'h01,   // 16-bit counter on the 16-bit digital output
    PERS_LOOPBACK = 8'h02,   // AXI stream loopback through one register stage
    PERS_BDT      = 8'h03,   // pileup-classification boosted decision tree
    PERS_DSP      = 8'h04    // multiply-accumulate on the four DSP slices
  } personality_e;

  localparam int unsigned CFG_WORDS = 64;  // words of configuration memory

  // ---------------------------------------------------- classifier format
  localparam int unsigned FX_W    = 28;   // ap_fixed<28,19>: 28 bits in all
  localparam int unsigned FX_I    = 19;   // 19 integer bits including sign
  localparam int unsigned FX_F    = FX_W - FX_I;  // 9 fraction bits
  localparam int unsigned N_FEAT  = 14;   // 13 y-profile sums + y0
  typedef logic signed [FX_W-1:0] fx_t;

endpackage
