// axil_slave_port: AXI-Lite slave handshake shared by the register endpoints.
//
// Turns the AXI-Lite channels into a simple register-file access: one write
// strobe (wr_en with address, data and byte strobes) when both AW and W have
// been seen, and one read strobe (rd_en with address) when AR is accepted.  The
// endpoint answers a write with wr_err and a read with rd_data/rd_err in the
// same cycle as the strobe (combinationally); this block registers the answer
// into the B or R channel and holds it until the master takes it.  AW and W
// may arrive in either order.  Write response one cycle after the later of
// AW/W; read data one cycle after AR is accepted.  The handshake scheme is this
// design's own; the paper names only AXI-Lite endpoints.
module axil_slave_port
  import efpga_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  axil_req_t   req,
  output axil_rsp_t   rsp,
  // register-file side
  output logic        wr_en,
  output logic [31:0] wr_addr,
  output logic [31:0] wr_data,
  output logic [3:0]  wr_strb,
  input  logic        wr_err,
  output logic        rd_en,
  output logic [31:0] rd_addr,
  input  logic [31:0] rd_data,
  input  logic        rd_err
);
  logic        aw_full, w_full, b_pend, r_pend;
  logic [31:0] aw_q, w_q;
  logic [3:0]  s_q;
  axi_resp_t   b_q, r_resp_q;
  logic [31:0] r_q;

  assign rsp.awready = !aw_full && !b_pend;
  assign rsp.wready  = !w_full  && !b_pend;
  assign rsp.bvalid  = b_pend;
  assign rsp.bresp   = b_q;
  assign rsp.arready = !r_pend;
  assign rsp.rvalid  = r_pend;
  assign rsp.rdata   = r_q;
  assign rsp.rresp   = r_resp_q;

  logic aw_now, w_now;
  assign aw_now = aw_full || (req.awvalid && rsp.awready);
  assign w_now  = w_full  || (req.wvalid  && rsp.wready);

  assign wr_en   = aw_now && w_now && !b_pend;
  assign wr_addr = aw_full ? aw_q : req.awaddr;
  assign wr_data = w_full  ? w_q  : req.wdata;
  assign wr_strb = w_full  ? s_q  : req.wstrb;
  assign rd_en   = req.arvalid && rsp.arready;
  assign rd_addr = req.araddr;

  always_ff @(posedge clk) begin
    if (rst) begin
      aw_full <= 1'b0; w_full <= 1'b0; b_pend <= 1'b0; r_pend <= 1'b0;
      aw_q <= '0; w_q <= '0; s_q <= '0; b_q <= RESP_OKAY; r_q <= '0; r_resp_q <= RESP_OKAY;
    end else begin
      if (wr_en) begin
        aw_full <= 1'b0; w_full <= 1'b0; b_pend <= 1'b1;
        b_q <= wr_err ? RESP_SLVERR : RESP_OKAY;
      end else begin
        if (req.awvalid && rsp.awready) begin aw_full <= 1'b1; aw_q <= req.awaddr; end
        if (req.wvalid && rsp.wready) begin w_full <= 1'b1; w_q <= req.wdata; s_q <= req.wstrb; end
      end
      if (b_pend && req.bready) b_pend <= 1'b0;
      if (rd_en) begin
        r_pend <= 1'b1; r_q <= rd_data; r_resp_q <= rd_err ? RESP_SLVERR : RESP_OKAY;
      end else if (r_pend && req.rready) r_pend <= 1'b0;
    end
  end

  a_b_hold: assert property (@(posedge clk) disable iff (rst)
    rsp.bvalid && !req.bready |=> rsp.bvalid && $stable(rsp.bresp));
  a_r_hold: assert property (@(posedge clk) disable iff (rst)
    rsp.rvalid && !req.rready |=> rsp.rvalid && $stable(rsp.rdata));

endmodule
