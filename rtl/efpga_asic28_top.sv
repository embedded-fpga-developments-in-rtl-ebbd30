// efpga_asic28_top: digital core of the 28nm eFPGA ASIC.
//
// Two paths reach the embedded FPGA.  The slow-control path: the SUGOI serial
// link (outside this module; its AXI-Lite master side is the sugoi_* port)
// enters an AXI-Lite crossbar that serves two endpoints, the eFPGA
// configuration/status module at 0x0000_0000-0x0000_FFFF and the version
// registers at 0x0001_0000-0x0001_FFFF; other addresses get DECERR.  The
// config/status module loads the bitstream into the fabric and connects two
// 32-bit buses into it and four out of it.  The data path: the PGPv4 link
// (outside; its AXI-stream side is the pgp_* ports) feeds the fabric's 64-bit
// inbound stream and takes its 64-bit outbound stream.  The fabric's 16-bit
// digital output leaves the chip on dout.
//
// All logic runs on one clock (the paper drives SUGOI, the AXI-Lite endpoints
// and the eFPGA from one clock; the place-and-route target was 200 MHz) with a
// synchronous active-high reset.
//
// From the paper: the blocks, their connections and the bus widths.  Own
// choices: the address map, the reset and the single-clock assumption for the
// stream path.
module efpga_asic28_top
  import efpga_pkg::*;
#(
  parameter logic [159:0] GIT_HASH = 160'h0,
  parameter logic [31:0]  REVISION = 32'h0000_0028
) (
  input  logic      clk,
  input  logic      rst,
  // AXI-Lite master side of the SUGOI link
  input  axil_req_t sugoi_req,
  output axil_rsp_t sugoi_rsp,
  // AXI streams to/from the PGPv4 link
  input  axis64_t   pgp_ib,
  output logic      pgp_ib_tready,
  output axis64_t   pgp_ob,
  input  logic      pgp_ob_tready,
  // 16-bit digital output
  output logic [15:0] dout
);
  localparam int unsigned N_TO   = 2;
  localparam int unsigned N_FROM = 4;

  axil_req_t s_req [2];
  axil_rsp_t s_rsp [2];

  axil_crossbar #(
    .N_SLAVES(2), .BASE({32'h0001_0000, 32'h0000_0000}), .MASK(32'hFFFF_0000)
  ) u_xbar (
    .clk, .rst, .m_req(sugoi_req), .m_rsp(sugoi_rsp), .s_req, .s_rsp
  );

  logic        cfg_start, cfg_wr, cfg_done, configured;
  logic [31:0] cfg_data;
  logic [31:0] to_fab   [N_TO];
  logic [31:0] from_fab [N_FROM];

  efpga_cfg_status #(.N_TO_FABRIC(N_TO), .N_FROM_FABRIC(N_FROM)) u_cfg (
    .clk, .rst, .req(s_req[0]), .rsp(s_rsp[0]),
    .cfg_start, .cfg_wr, .cfg_data, .cfg_done, .cfg_configured(configured),
    .to_fab, .from_fab
  );

  version_regs #(.GIT_HASH(GIT_HASH), .REVISION(REVISION)) u_version (
    .clk, .rst, .req(s_req[1]), .rsp(s_rsp[1])
  );

  efpga_fabric #(.N_TO_FABRIC(N_TO), .N_FROM_FABRIC(N_FROM)) u_fabric (
    .clk, .rst,
    .cfg_start, .cfg_wr, .cfg_data, .cfg_done, .configured,
    .to_fab, .from_fab,
    .ib_axis(pgp_ib), .ib_tready(pgp_ib_tready),
    .ob_axis(pgp_ob), .ob_tready(pgp_ob_tready),
    .dout
  );
endmodule
