// tb_version_regs: self-checking test of the version register endpoint.
// Reads all five git-hash words and the revision and compares them with the
// parameter values; checks that an unmapped read and any write get SLVERR and
// that read data arrives one cycle after the address is accepted.
module tb_version_regs;
  import efpga_pkg::*;
  localparam logic [159:0] HASH = 160'h0123456789abcdef_fedcba9876543210_a5a5c3c3;
  localparam logic [31:0]  REV  = 32'h0000_0028;

  logic clk = 1'b0, rst = 1'b1;
  axil_req_t m_req;
  axil_rsp_t m_rsp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  version_regs #(.GIT_HASH(HASH), .REVISION(REV)) dut (.clk, .rst, .req(m_req), .rsp(m_rsp));

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
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d; axi_resp_t r; int t0;
    m_req = '0;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    for (int k = 0; k < 5; k++) begin
      axil_read(32'(4*k), d, r);
      check(r === RESP_OKAY && d === HASH[32*k +: 32], $sformatf("hash word %0d = %h", k, d));
    end
    axil_read(32'h14, d, r);
    check(r === RESP_OKAY && d === REV, "revision");
    axil_read(32'h18, d, r);
    check(r === RESP_SLVERR, "unmapped read gives SLVERR");
    axil_write(32'h14, 32'hdead_beef, 4'hF, r);
    check(r === RESP_SLVERR, "write gives SLVERR");
    axil_read(32'h14, d, r);
    check(d === REV, "revision unchanged after write");
    // latency: rvalid one cycle after the AR handshake
    @(negedge clk); m_req.araddr = 32'h0; m_req.arvalid = 1'b1; m_req.rready = 1'b0;
    #4; check(m_rsp.arready, "arready when idle");
    @(negedge clk); m_req.arvalid = 1'b0; #4;
    check(m_rsp.rvalid, "rvalid one cycle after AR");
    @(negedge clk); m_req.rready = 1'b1; @(negedge clk); m_req.rready = 1'b0;
    t0 = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
