// tb_axil_crossbar: self-checking test of the AXI-Lite crossbar.
// Two memory-like slave models with different, random response delays sit on
// the slave ports.  Random writes and reads across both windows and outside
// them are compared with a reference memory; outside addresses must give
// DECERR and read data 0 without reaching a slave.
module tb_axil_crossbar;
  import efpga_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  axil_req_t m_req;
  axil_rsp_t m_rsp;
  axil_req_t s_req [2];
  axil_rsp_t s_rsp [2];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  axil_crossbar #(.N_SLAVES(2), .BASE({32'h0001_0000, 32'h0000_0000}), .MASK(32'hFFFF_0000)) dut (
    .clk, .rst, .m_req, .m_rsp, .s_req, .s_rsp
  );

  // slave models: 16-word memory, tag each word with its slave number
  for (genvar k = 0; k < 2; k++) begin : g_slv
    logic [31:0] mem [16];
    logic aw_ok, w_ok, b_v, r_v;
    logic [31:0] aw_a, r_d;
    int delay;
    int hit;
    always_ff @(posedge clk) begin
      if (rst) begin
        aw_ok <= 0; w_ok <= 0; b_v <= 0; r_v <= 0; delay <= 0; r_d <= 0; aw_a <= 0; hit <= 0;
        for (int i = 0; i < 16; i++) mem[i] <= 32'(k) << 28;
      end else begin
        if (s_req[k].awvalid && !aw_ok && delay == 0) begin aw_ok <= 1; aw_a <= s_req[k].awaddr; end
        if (s_req[k].wvalid && !w_ok && aw_ok) begin
          w_ok <= 1; mem[aw_a[5:2]] <= s_req[k].wdata; hit <= hit + 1;
        end
        if (aw_ok && w_ok && !b_v) b_v <= 1;
        if (b_v && s_req[k].bready) begin b_v <= 0; aw_ok <= 0; w_ok <= 0; end
        if (s_req[k].arvalid && !r_v && delay == 0) begin
          r_v <= 1; r_d <= mem[s_req[k].araddr[5:2]]; hit <= hit + 1;
        end
        if (r_v && s_req[k].rready) r_v <= 0;
        delay <= (delay == 0) ? int'($urandom_range(0, 3)) : delay - 1;
      end
    end
    always_comb begin
      s_rsp[k] = '0;
      s_rsp[k].awready = s_req[k].awvalid && !aw_ok && delay == 0;
      s_rsp[k].wready  = s_req[k].wvalid && !w_ok && aw_ok;
      s_rsp[k].bvalid  = b_v;
      s_rsp[k].bresp   = RESP_OKAY;
      s_rsp[k].arready = s_req[k].arvalid && !r_v && delay == 0;
      s_rsp[k].rvalid  = r_v;
      s_rsp[k].rdata   = r_d;
      s_rsp[k].rresp   = RESP_OKAY;
    end
  end

  // ---- AXI-Lite master tasks: drive after the falling edge, sample 1 time
  // ---- unit before the rising edge, so every handshake is race free.
  task automatic axil_write(input logic [31:0] a, input logic [31:0] d,
                            input logic [3:0] s, output axi_resp_t r);
    logic aw_hs, w_hs;
    @(negedge clk);
    m_req.awaddr = a; m_req.awvalid = 1'b1;
    m_req.wdata = d; m_req.wstrb = s; m_req.wvalid = 1'b1; m_req.bready = 1'b0;
    while (m_req.awvalid || m_req.wvalid) begin
      #4;
      aw_hs = m_req.awvalid && m_rsp.awready;
      w_hs  = m_req.wvalid  && m_rsp.wready;
      @(negedge clk);
      if (aw_hs) m_req.awvalid = 1'b0;
      if (w_hs)  m_req.wvalid  = 1'b0;
    end
    m_req.bready = 1'b1;
    #4;
    while (!m_rsp.bvalid) begin @(negedge clk); #4; end
    r = m_rsp.bresp;
    @(negedge clk);
    m_req.bready = 1'b0;
  endtask

  task automatic axil_read(input logic [31:0] a, output logic [31:0] d, output axi_resp_t r);
    @(negedge clk);
    m_req.araddr = a; m_req.arvalid = 1'b1; m_req.rready = 1'b0;
    #4;
    while (!m_rsp.arready) begin @(negedge clk); #4; end
    @(negedge clk);
    m_req.arvalid = 1'b0; m_req.rready = 1'b1;
    #4;
    while (!m_rsp.rvalid) begin @(negedge clk); #4; end
    d = m_rsp.rdata; r = m_rsp.rresp;
    @(negedge clk);
    m_req.rready = 1'b0;
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d, a; axi_resp_t r;
    logic [31:0] ref_mem [2][16];
    int n_dec = 0, h0, h1;
    m_req = '0;
    for (int k = 0; k < 2; k++) for (int i = 0; i < 16; i++) ref_mem[k][i] = 32'(k) << 28;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    for (int n = 0; n < 300; n++) begin
      int sel; sel = $urandom_range(0, 2);
      a = (sel == 2) ? 32'h0002_0000 + 32'($urandom_range(0, 15) * 4)
                     : (32'(sel) << 16) + 32'($urandom_range(0, 15) * 4);
      h0 = g_slv[0].hit; h1 = g_slv[1].hit;
      if ($urandom_range(0, 1) == 1) begin
        d = $urandom;
        axil_write(a, d, 4'hF, r);
        if (sel == 2) begin
          check(r === RESP_DECERR && g_slv[0].hit === h0 && g_slv[1].hit === h1, "write decode error");
          n_dec++;
        end else begin
          check(r === RESP_OKAY, "write okay");
          ref_mem[sel][a[5:2]] = d;
        end
      end else begin
        axil_read(a, d, r);
        if (sel == 2) begin
          check(r === RESP_DECERR && d === 0 && g_slv[0].hit === h0 && g_slv[1].hit === h1, "read decode error");
          n_dec++;
        end else
          check(r === RESP_OKAY && d === ref_mem[sel][a[5:2]], $sformatf("read %h = %h", a, d));
      end
    end
    check(n_dec > 0, "decode errors exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
