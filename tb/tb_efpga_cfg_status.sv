// tb_efpga_cfg_status: self-checking test of the eFPGA configuration/status
// endpoint.  A small fabric stand-in records the bitstream strobes and drives
// the from-fabric buses.  Checks: start/word/done strobes and the order of the
// words, the word counter and configured flag in STATUS, read/write of the
// to-fabric buses with byte strobes, read of the from-fabric buses, and SLVERR
// for unmapped and read-only offsets.
module tb_efpga_cfg_status;
  import efpga_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  axil_req_t m_req;
  axil_rsp_t m_rsp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic        cfg_start, cfg_wr, cfg_done, configured;
  logic [31:0] cfg_data;
  logic [31:0] to_fab [2];
  logic [31:0] from_fab [4];

  efpga_cfg_status #(.N_TO_FABRIC(2), .N_FROM_FABRIC(4)) dut (
    .clk, .rst, .req(m_req), .rsp(m_rsp),
    .cfg_start, .cfg_wr, .cfg_data, .cfg_done, .cfg_configured(configured),
    .to_fab, .from_fab
  );

  // fabric stand-in
  logic [31:0] got [$];
  int n_start = 0, n_done = 0;
  always_ff @(posedge clk) begin
    if (rst) configured <= 1'b0;
    else begin
      if (cfg_start) begin configured <= 1'b0; n_start++; end
      if (cfg_wr) got.push_back(cfg_data);
      if (cfg_done) begin configured <= 1'b1; n_done++; end
    end
  end
  assign from_fab[0] = 32'h1111_0000;
  assign from_fab[1] = 32'h2222_0001;
  assign from_fab[2] = 32'h3333_0002;
  assign from_fab[3] = 32'h4444_0003;

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
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d; axi_resp_t r;
    logic [31:0] words [10];
    m_req = '0;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    axil_read(32'h8, d, r);
    check(r === RESP_OKAY && d === 32'h0, "STATUS after reset");
    axil_write(32'h4, 32'h1, 4'hF, r);
    check(r === RESP_OKAY && n_start === 1, "start strobe");
    for (int i = 0; i < 10; i++) begin
      words[i] = $urandom;
      axil_write(32'h0, words[i], 4'hF, r);
      check(r === RESP_OKAY, "bitstream write ok");
    end
    check(got.size() === 10, "ten words pushed");
    for (int i = 0; i < 10 && i < got.size(); i++)
      check(got[i] === words[i], $sformatf("word %0d in order", i));
    axil_read(32'h8, d, r);
    check(d === {16'd10, 16'd0}, $sformatf("STATUS counts words, not configured: %h", d));
    axil_write(32'h4, 32'h2, 4'hF, r);
    repeat (2) @(posedge clk);
    axil_read(32'h8, d, r);
    check(n_done === 1 && d === {16'd10, 16'd1}, $sformatf("configured after done: %h", d));
    // to-fabric registers
    axil_write(32'h10, 32'hcafe_f00d, 4'hF, r);
    axil_write(32'h14, 32'h1234_5678, 4'hF, r);
    check(to_fab[0] === 32'hcafe_f00d && to_fab[1] === 32'h1234_5678, "to-fabric buses driven");
    axil_write(32'h10, 32'haabb_ccdd, 4'b0101, r);
    check(to_fab[0] === 32'hcabb_f0dd, $sformatf("byte strobes: %h", to_fab[0]));
    axil_read(32'h14, d, r);
    check(d === 32'h1234_5678, "to-fabric readback");
    for (int k = 0; k < 4; k++) begin
      axil_read(32'h20 + 32'(4*k), d, r);
      check(r === RESP_OKAY && d === from_fab[k], $sformatf("from-fabric bus %0d", k));
    end
    axil_read(32'h30, d, r);
    check(r === RESP_SLVERR, "unmapped read SLVERR");
    axil_write(32'h20, 32'h0, 4'hF, r);
    check(r === RESP_SLVERR, "write to read-only SLVERR");
    axil_write(32'h4, 32'h1, 4'hF, r);
    axil_read(32'h8, d, r);
    check(n_start === 2 && d === 32'h0, "restart clears count and flag");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
