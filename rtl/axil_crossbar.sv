// axil_crossbar: AXI-Lite crossbar from one master to N_SLAVES endpoints.
//
// In the ASIC the SUGOI serial link is the single master; the endpoints are the
// eFPGA configuration/status module and the generic version registers.  Each
// slave k owns the addresses with (addr & MASK) == BASE[k]; an address no slave
// owns is answered by the crossbar itself with DECERR (read data 0).
//
// Write and read paths are independent and each carries one transaction at a
// time.  Write: the crossbar waits for AWVALID and WVALID together, accepts both
// in one cycle, forwards address and data to the chosen slave (each held until
// that slave accepts it), waits for the slave's B response and returns it.  Read:
// accepts AR, forwards it, waits for R and returns it.  Addresses are passed to
// the slave unchanged.  Latency from accepted request to response valid is the
// slave's latency plus two cycles.
//
// The paper gives only the crossbar's place (one master, two AXI-Lite
// endpoints); the address map, the one-outstanding-transaction scheme and the
// DECERR behaviour are this design's own.
module axil_crossbar
  import efpga_pkg::*;
#(
  parameter int unsigned              N_SLAVES = 2,
  parameter logic [N_SLAVES*32-1:0]   BASE     = {32'h0001_0000, 32'h0000_0000},
  parameter logic [31:0]              MASK     = 32'hFFFF_0000
) (
  input  logic      clk,
  input  logic      rst,
  input  axil_req_t m_req,
  output axil_rsp_t m_rsp,
  output axil_req_t s_req [N_SLAVES],
  input  axil_rsp_t s_rsp [N_SLAVES]
);
  localparam int unsigned SW = (N_SLAVES > 1) ? $clog2(N_SLAVES) : 1;

  typedef enum logic [1:0] {T_IDLE, T_FWD, T_WAIT, T_RESP} txn_e;

  // address decode: returns hit and index
  function automatic logic [SW:0] decode(input logic [31:0] a);
    decode = '0;
    for (int k = N_SLAVES-1; k >= 0; k--)
      if ((a & MASK) == BASE[k*32 +: 32]) decode = {1'b1, SW'(k)};
  endfunction

  // ----------------------------------------------------------- write path
  txn_e          w_st;
  logic [SW-1:0] w_sel;
  logic [31:0]   w_addr, w_data;
  logic [3:0]    w_strb;
  logic          aw_pend, w_pend;
  axi_resp_t     b_resp;
  logic [SW:0]   w_dec;

  assign w_dec = decode(m_req.awaddr);

  always_ff @(posedge clk) begin
    if (rst) begin
      w_st <= T_IDLE; w_sel <= '0; w_addr <= '0; w_data <= '0; w_strb <= '0;
      aw_pend <= 1'b0; w_pend <= 1'b0; b_resp <= RESP_OKAY;
    end else begin
      unique case (w_st)
        T_IDLE: if (m_req.awvalid && m_req.wvalid) begin
          w_addr <= m_req.awaddr; w_data <= m_req.wdata; w_strb <= m_req.wstrb;
          w_sel  <= w_dec[SW-1:0];
          if (w_dec[SW]) begin
            aw_pend <= 1'b1; w_pend <= 1'b1; w_st <= T_FWD;
          end else begin
            b_resp <= RESP_DECERR; w_st <= T_RESP;
          end
        end
        T_FWD: begin
          if (s_rsp[w_sel].awready) aw_pend <= 1'b0;
          if (s_rsp[w_sel].wready)  w_pend  <= 1'b0;
          if ((!aw_pend || s_rsp[w_sel].awready) && (!w_pend || s_rsp[w_sel].wready))
            w_st <= T_WAIT;
        end
        T_WAIT: if (s_rsp[w_sel].bvalid) begin
          b_resp <= s_rsp[w_sel].bresp; w_st <= T_RESP;
        end
        T_RESP: if (m_req.bready) w_st <= T_IDLE;
        default: w_st <= T_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ read path
  txn_e          r_st;
  logic [SW-1:0] r_sel;
  logic [31:0]   r_addr, r_data;
  axi_resp_t     r_resp;
  logic [SW:0]   r_dec;

  assign r_dec = decode(m_req.araddr);

  always_ff @(posedge clk) begin
    if (rst) begin
      r_st <= T_IDLE; r_sel <= '0; r_addr <= '0; r_data <= '0; r_resp <= RESP_OKAY;
    end else begin
      unique case (r_st)
        T_IDLE: if (m_req.arvalid) begin
          r_addr <= m_req.araddr; r_sel <= r_dec[SW-1:0];
          if (r_dec[SW]) r_st <= T_FWD;
          else begin r_resp <= RESP_DECERR; r_data <= '0; r_st <= T_RESP; end
        end
        T_FWD:  if (s_rsp[r_sel].arready) r_st <= T_WAIT;
        T_WAIT: if (s_rsp[r_sel].rvalid) begin
          r_data <= s_rsp[r_sel].rdata; r_resp <= s_rsp[r_sel].rresp; r_st <= T_RESP;
        end
        T_RESP: if (m_req.rready) r_st <= T_IDLE;
        default: r_st <= T_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------- outputs
  always_comb begin
    m_rsp = '0;
    m_rsp.awready = (w_st == T_IDLE) && m_req.awvalid && m_req.wvalid;
    m_rsp.wready  = (w_st == T_IDLE) && m_req.awvalid && m_req.wvalid;
    m_rsp.bvalid  = (w_st == T_RESP);
    m_rsp.bresp   = b_resp;
    m_rsp.arready = (r_st == T_IDLE);
    m_rsp.rvalid  = (r_st == T_RESP);
    m_rsp.rdata   = r_data;
    m_rsp.rresp   = r_resp;
    for (int k = 0; k < N_SLAVES; k++) begin
      s_req[k]         = '0;
      s_req[k].awaddr  = w_addr;
      s_req[k].wdata   = w_data;
      s_req[k].wstrb   = w_strb;
      s_req[k].araddr  = r_addr;
      s_req[k].awvalid = (w_st == T_FWD) && (w_sel == SW'(k)) && aw_pend;
      s_req[k].wvalid  = (w_st == T_FWD) && (w_sel == SW'(k)) && w_pend;
      s_req[k].bready  = (w_st == T_WAIT) && (w_sel == SW'(k));
      s_req[k].arvalid = (r_st == T_FWD)  && (r_sel == SW'(k));
      s_req[k].rready  = (r_st == T_WAIT) && (r_sel == SW'(k));
    end
  end

  // AXI rule: a master holds a valid request stable until it is accepted.
  a_aw_stable: assert property (@(posedge clk) disable iff (rst)
    m_req.awvalid && !m_rsp.awready |=> m_req.awvalid && $stable(m_req.awaddr));
  a_ar_stable: assert property (@(posedge clk) disable iff (rst)
    m_req.arvalid && !m_rsp.arready |=> m_req.arvalid && $stable(m_req.araddr));

endmodule
