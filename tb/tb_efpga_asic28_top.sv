// tb_efpga_asic28_top: end-to-end test of the 28nm eFPGA ASIC core at its
// default parameters.  The testbench plays the two off-chip links: it issues
// AXI-Lite transactions where the SUGOI link would, and drives/consumes the
// 64-bit streams where the PGPv4 link would.  Sequence: read the version
// registers; probe an unmapped address (DECERR) and a read-only register
// (SLVERR); load the counter bitstream over AXI-Lite and watch the 16-bit
// output count; reload with the stream loopback and send PRBS frames with
// random back-pressure, checking them bit for bit; reload with the pileup
// classifier and score random tracks against a reference tree, reading the
// counts back through the from-fabric registers; reload with the DSP test and
// check a multiply-accumulate.  Each mechanism is counted and must occur.
module tb_efpga_asic28_top;
  import efpga_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  axil_req_t m_req;
  axil_rsp_t m_rsp;
  axis64_t ib, ob;
  logic ib_tready, ob_tready;
  logic [15:0] dout;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  efpga_asic28_top dut (
    .clk, .rst, .sugoi_req(m_req), .sugoi_rsp(m_rsp),
    .pgp_ib(ib), .pgp_ib_tready(ib_tready), .pgp_ob(ob), .pgp_ob_tready(ob_tready),
    .dout
  );

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

  // ---- stream side: a receiver that records every outbound beat (with
  // ---- random back-pressure when rx_random is set) and a beat sender.
  axis64_t rxq [$];
  int  n_ib_stall = 0, n_ob_hold = 0;
  bit  rx_random = 1'b0;
  initial begin
    ob_tready = 1'b0;
    forever begin
      @(negedge clk);
      ob_tready = rx_random ? ($urandom_range(0, 3) != 0) : 1'b1;
      #4;
      if (ob.tvalid && ob_tready) rxq.push_back(ob);
      if (ob.tvalid && !ob_tready) n_ob_hold++;
      if (ib.tvalid && !ib_tready) n_ib_stall++;
    end
  end

  // call at a falling edge; returns at the falling edge after the handshake
  task automatic send_beat(input logic [63:0] d, input logic last);
    ib.tvalid = 1'b1; ib.tdata = d; ib.tkeep = 8'hFF; ib.tlast = last;
    #4;
    while (!ib_tready) begin @(negedge clk); #4; end
    @(negedge clk);
    ib.tvalid = 1'b0;
  endtask

  // reference pileup tree, written in real numbers from the printed tree
  function automatic real ref_tree(input real x [14]);
    if (x[3] <= -0.2) begin
      if (x[13] <= 6.811) return 0.851;
      if (x[8] <= 2.3) return -0.156;
      return 0.452;
    end
    if (x[2] <= -399.25) return 0.454;
    if (x[13] <= 5.88) begin
      if (x[4] <= 3.7) return 0.806;
      if (x[10] <= -0.05) return 0.319;
      return -0.006;
    end
    if (x[8] <= -545.65) return 0.266;
    if (x[6] <= -515.55) return 0.191;
    return -0.169;
  endfunction

  // a random track: feature values near the thresholds or anywhere in range
  function automatic void make_track(output int f [14]);
    for (int i = 0; i < 14; i++)
      f[i] = ($urandom_range(0, 2) == 0) ? int'($urandom_range(0, 600000)) - 300000
                                         : int'($urandom_range(0, 8000)) - 4000;
  endfunction

  // expected outbound beat for a track
  function automatic logic [63:0] expect_beat(input int f [14]);
    real x [14];
    real v;
    int  s;
    for (int i = 0; i < 14; i++) x[i] = real'(f[i]) / 512.0;
    v = ref_tree(x);
    s = int'($floor(v * 512.0));
    return {31'd0, (s > 252), 32'(s)};
  endfunction

  // mechanism counters
  int n_load = 0, n_decerr = 0, n_slverr = 0, n_pers [5];

  task automatic load(input logic [31:0] words [$]);
    axi_resp_t r; logic [31:0] d;
    axil_write(32'h4, 32'h1, 4'hF, r);
    foreach (words[i]) axil_write(32'h0, words[i], 4'hF, r);
    axil_write(32'h4, 32'h2, 4'hF, r);
    axil_read(32'h8, d, r);
    check(d === {16'(words.size()), 16'd1}, $sformatf("STATUS after load %h", d));
    n_load++;
    n_pers[words[0][2:0]]++;
  endtask

  // 64-bit PRBS-31 generator (x^31 + x^28 + 1), 64 steps per word
  logic [30:0] prbs = 31'h1234_5678;
  function automatic logic [63:0] prbs_word();
    logic [63:0] w;
    for (int i = 0; i < 64; i++) begin
      w[i] = prbs[30] ^ prbs[27];
      prbs = {prbs[29:0], w[i]};
    end
    return w;
  endfunction

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d; axi_resp_t r;
    logic [31:0] bs [$];
    logic [63:0] exp_q [$];
    int f [14];
    logic [15:0] d0;
    m_req = '0; ib = '0;
    foreach (n_pers[i]) n_pers[i] = 0;
    repeat (4) @(negedge clk);
    rst = 1'b0;

    // ---- identification and error responses
    axil_read(32'h0001_0014, d, r);
    check(r === RESP_OKAY && d === 32'h0000_0028, "revision register");
    axil_read(32'h0001_0000, d, r);
    check(r === RESP_OKAY && d === 32'h0, "git hash word 0");
    axil_read(32'h0005_0000, d, r);
    check(r === RESP_DECERR, "unmapped read DECERR");  if (r === RESP_DECERR) n_decerr++;
    axil_write(32'h0003_0000, 32'h1, 4'hF, r);
    check(r === RESP_DECERR, "unmapped write DECERR"); if (r === RESP_DECERR) n_decerr++;
    axil_write(32'h0000_0024, 32'h1, 4'hF, r);
    check(r === RESP_SLVERR, "read-only write SLVERR"); if (r === RESP_SLVERR) n_slverr++;
    axil_read(32'h0000_0008, d, r);
    check(d === 32'h0, "not configured after reset");
    check(dout === 16'd0 && !ib_tready, "fabric idle before configuration");

    // ---- counter bitstream on the 16-bit output
    bs = {32'(PERS_COUNTER)};
    for (int j = 0; j < 16; j++) bs.push_back(32'h0001_6666);
    for (int j = 0; j < 15; j++) bs.push_back(32'h0000_8888);
    load(bs);
    @(negedge clk); #4; d0 = dout;
    for (int t = 1; t <= 100; t++) begin
      @(negedge clk); #4;
      check(dout === d0 + 16'(t), $sformatf("counter output step %0d", t));
    end
    axil_read(32'h20, d, r);
    check(r === RESP_OKAY && d[15:0] - d0 > 100 && d[31:16] === 0, $sformatf("counter read back %h", d));

    // ---- AXI stream loopback with PRBS frames and back-pressure
    load('{32'(PERS_LOOPBACK)});
    rx_random = 1'b1; rxq.delete(); n_ib_stall = 0;
    @(negedge clk);
    for (int fr = 0; fr < 32; fr++)
      for (int n = 0; n < 16; n++) begin
        exp_q.push_back(prbs_word());
        send_beat(exp_q[$], n == 15);
      end
    repeat (20) @(negedge clk);
    check(rxq.size() === exp_q.size(), $sformatf("loopback %0d of %0d beats", rxq.size(), exp_q.size()));
    begin
      int bit_err; bit_err = 0;
      for (int n = 0; n < exp_q.size() && n < rxq.size(); n++)
        bit_err += $countones(rxq[n].tdata ^ exp_q[n]) + int'(rxq[n].tlast != (n % 16 == 15));
      check(bit_err === 0, $sformatf("loopback bit errors %0d", bit_err));
    end
    check(n_ib_stall > 0, "loopback back-pressure stall");
    $display("loopback stalls: %0d", n_ib_stall);
    exp_q.delete(); rxq.delete();

    // ---- pileup classifier
    load('{32'(PERS_BDT)});
    n_ib_stall = 0;
    @(negedge clk);
    for (int n = 0; n < 500; n++) begin
      make_track(f);
      exp_q.push_back(expect_beat(f));
      for (int j = 0; j < 7; j++) send_beat({32'(f[2*j+1]), 32'(f[2*j])}, j == 6);
    end
    repeat (20) @(negedge clk);
    check(rxq.size() === 500, $sformatf("classifier results %0d", rxq.size()));
    begin
      int na, bad; na = 0; bad = 0;
      for (int n = 0; n < 500 && n < rxq.size(); n++) begin
        if (rxq[n].tdata != exp_q[n]) bad++;
        na += int'(exp_q[n][32]);
      end
      check(bad === 0, $sformatf("classifier mismatches %0d of 500", bad));
      axil_read(32'h24, d, r);
      check(d === 32'd500, $sformatf("tracks scored %0d", d));
      axil_read(32'h28, d, r);
      check(d === 32'(na), $sformatf("tracks above threshold %0d exp %0d", d, na));
      $display("classifier: %0d of 500 tracks above threshold", na);
    end
    check(n_ib_stall > 0, "classifier input stall");
    exp_q.delete(); rxq.delete();

    // ---- DSP slices through the register buses
    load('{32'(PERS_DSP)});
    axil_write(32'h14, 32'h04_03_02_FF, 4'hF, r);           // a = -1, 2, 3, 4
    axil_write(32'h10, {1'b1, 14'd0, 1'b1, 4'hF, 4'hF, 8'd5}, 4'hF, r);  // clear+mac, b = 5
    axil_write(32'h10, {1'b0, 14'd0, 1'b1, 4'h0, 4'hF, 8'hFD}, 4'hF, r); // mac, b = -3
    for (int k = 0; k < 4; k++) begin
      int a, e;
      a = (k == 0) ? -1 : k + 1;
      e = a * 5 + a * (-3);
      axil_read(32'h20 + 32'(4*k), d, r);
      check(d === 32'(e), $sformatf("dsp %0d = %h exp %0d", k, d, e));
    end

    // ---- mechanism coverage
    check(n_load === 4, "four bitstream loads");
    check(n_decerr === 2 && n_slverr === 1, "error responses seen");
    for (int p = 1; p <= 4; p++) check(n_pers[p] === 1, $sformatf("personality %0d loaded", p));
    $display("loads=%0d decerr=%0d slverr=%0d", n_load, n_decerr, n_slverr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
