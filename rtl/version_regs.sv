// version_regs: read-only AXI-Lite endpoint with the ASIC's identification.
//
// Holds the git hash of the source at tape-out (160 bits, five words, least
// significant word first at offset 0x00) and the ASIC revision number (offset
// 0x14).  Both are fixed at elaboration by parameters.  A read of any other
// offset, and every write, is answered with SLVERR.  Read data arrives one
// cycle after AR is accepted (see axil_slave_port).
//
// The paper says what this module holds (git hash and revision); the offsets,
// the hash width (a SHA-1 hash) and the error responses are this design's own.
module version_regs
  import efpga_pkg::*;
#(
  parameter logic [159:0] GIT_HASH = 160'h0,
  parameter logic [31:0]  REVISION = 32'h0000_0028
) (
  input  logic      clk,
  input  logic      rst,
  input  axil_req_t req,
  output axil_rsp_t rsp
);
  logic        wr_en, rd_en;
  logic [31:0] wr_addr, wr_data, rd_addr, rd_data;
  logic [3:0]  wr_strb;
  logic        rd_err;

  axil_slave_port u_port (
    .clk, .rst, .req, .rsp,
    .wr_en, .wr_addr, .wr_data, .wr_strb, .wr_err(1'b1),
    .rd_en, .rd_addr, .rd_data, .rd_err
  );

  always_comb begin
    rd_data = '0;
    rd_err  = 1'b0;
    unique case (rd_addr[11:0])
      12'h000: rd_data = GIT_HASH[31:0];
      12'h004: rd_data = GIT_HASH[63:32];
      12'h008: rd_data = GIT_HASH[95:64];
      12'h00C: rd_data = GIT_HASH[127:96];
      12'h010: rd_data = GIT_HASH[159:128];
      12'h014: rd_data = REVISION;
      default: rd_err  = 1'b1;
    endcase
  end

endmodule
