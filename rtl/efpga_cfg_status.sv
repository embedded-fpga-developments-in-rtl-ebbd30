// efpga_cfg_status: AXI-Lite endpoint that configures and talks to the eFPGA.
//
// Three jobs.  (1) Bitstream loading: a write of 1 to CTRL bit 0 starts a load
// (the fabric drops its configuration), each write to BITSTREAM pushes one
// 32-bit word into the fabric's configuration port (cfg_wr for one cycle with
// cfg_data), and a write of 1 to CTRL bit 1 ends the load (cfg_done for one
// cycle), after which the fabric runs the loaded design.  STATUS reads back the
// fabric's "configured" flag (bit 0) and the number of words pushed since the
// last start (bits 31:16).  (2) N_TO_FABRIC read/write 32-bit registers whose
// contents drive buses into the fabric (byte strobes honoured).  (3) N_FROM_FABRIC
// read-only registers that sample buses coming out of the fabric.
//
// Register map (byte offsets within the endpoint): 0x000 BITSTREAM (W),
// 0x004 CTRL (W), 0x008 STATUS (R), 0x010+4k to-fabric bus k (RW),
// 0x020+4k from-fabric bus k (R).  Other offsets, writes to read-only and reads
// of write-only registers give SLVERR.  Strobes to the fabric appear the cycle
// after the AXI write is accepted.
//
// From the paper: the three jobs, 2 buses in and 4 buses out of the fabric on
// the 28nm ASIC (3 out on the 130nm one), 32-bit width.  Own choices: the
// register map, the start/word/done loading protocol and the error responses.
module efpga_cfg_status
  import efpga_pkg::*;
#(
  parameter int unsigned N_TO_FABRIC   = 2,
  parameter int unsigned N_FROM_FABRIC = 4
) (
  input  logic        clk,
  input  logic        rst,
  input  axil_req_t   req,
  output axil_rsp_t   rsp,
  // bitstream port to the fabric
  output logic        cfg_start,
  output logic        cfg_wr,
  output logic [31:0] cfg_data,
  output logic        cfg_done,
  input  logic        cfg_configured,
  // register buses
  output logic [31:0] to_fab   [N_TO_FABRIC],
  input  logic [31:0] from_fab [N_FROM_FABRIC]
);
  logic        wr_en, rd_en, wr_err, rd_err;
  logic [31:0] wr_addr, wr_data, rd_addr, rd_data;
  logic [3:0]  wr_strb;
  logic [15:0] n_words;

  axil_slave_port u_port (
    .clk, .rst, .req, .rsp,
    .wr_en, .wr_addr, .wr_data, .wr_strb, .wr_err,
    .rd_en, .rd_addr, .rd_data, .rd_err
  );

  logic [11:0] wa, ra;
  assign wa = wr_addr[11:0];
  assign ra = rd_addr[11:0];

  // index of a register in a bank at base b, or -1 when outside it
  function automatic int bank_idx(input logic [11:0] a, input logic [11:0] b, input int n);
    bank_idx = -1;
    for (int k = 0; k < n; k++)
      if (a == b + 12'(4*k)) bank_idx = k;
  endfunction

  always_comb begin
    wr_err = 1'b0;
    if (wa != CS_BITSTREAM && wa != CS_CTRL && bank_idx(wa, CS_TO_FAB, N_TO_FABRIC) < 0)
      wr_err = 1'b1;
  end

  always_comb begin
    int t, f;
    t = bank_idx(ra, CS_TO_FAB, N_TO_FABRIC);
    f = bank_idx(ra, CS_FROM_FAB, N_FROM_FABRIC);
    rd_data = '0;
    rd_err  = 1'b0;
    if (ra == CS_STATUS)  rd_data = {n_words, 15'd0, cfg_configured};
    else if (t >= 0)      rd_data = to_fab[t];
    else if (f >= 0)      rd_data = from_fab[f];
    else                  rd_err  = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cfg_start <= 1'b0; cfg_wr <= 1'b0; cfg_done <= 1'b0; cfg_data <= '0; n_words <= '0;
      for (int k = 0; k < N_TO_FABRIC; k++) to_fab[k] <= '0;
    end else begin
      cfg_start <= 1'b0; cfg_wr <= 1'b0; cfg_done <= 1'b0;
      if (wr_en && !wr_err) begin
        if (wa == CS_BITSTREAM) begin
          cfg_wr <= 1'b1; cfg_data <= wr_data; n_words <= n_words + 16'd1;
        end
        if (wa == CS_CTRL) begin
          if (wr_data[0]) begin cfg_start <= 1'b1; n_words <= '0; end
          if (wr_data[1]) cfg_done <= 1'b1;
        end
        for (int k = 0; k < N_TO_FABRIC; k++)
          if (wa == CS_TO_FAB + 12'(4*k))
            for (int b = 0; b < 4; b++)
              if (wr_strb[b]) to_fab[k][8*b +: 8] <= wr_data[8*b +: 8];
      end
    end
  end

endmodule
