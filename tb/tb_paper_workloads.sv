// tb_paper_workloads: the three bitstream tests reported for the 28 nm chip,
// run on the full core at default parameters and at full length.
//  * 16-bit counter: followed on the 16-bit digital output through a complete
//    wrap (more than 65,536 cycles), every cycle checked.
//  * Stream loopback: 2,000 PRBS-31 frames of 16 beats under random
//    back-pressure, checked bit for bit.
//  * Pileup classifier: 550,000 random tracks (the size of the simulated
//    pixel data set used on the chip), every score compared with a
//    reference tree; the latency from the last feature beat to the result
//    beat is measured and must stay under 25 ns at the 200 MHz clock target.
// Results are compared as they arrive, so memory stays small.
module tb_paper_workloads;
  import efpga_pkg::*;
  localparam int N_TRACKS = 550000;
  localparam int N_FRAMES = 2000;

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

  task automatic load(input logic [31:0] words [$]);
    axi_resp_t r;
    axil_write(32'h4, 32'h1, 4'hF, r);
    foreach (words[i]) axil_write(32'h0, words[i], 4'hF, r);
    axil_write(32'h4, 32'h2, 4'hF, r);
  endtask

  logic [30:0] prbs = 31'h0BAD_F00D;
  function automatic logic [63:0] prbs_word();
    logic [63:0] w;
    for (int i = 0; i < 64; i++) begin
      w[i] = prbs[30] ^ prbs[27];
      prbs = {prbs[29:0], w[i]};
    end
    return w;
  endfunction

  // on-the-fly comparison of outbound beats
  logic [63:0] expq [$];
  int  n_bad = 0, n_seen = 0;
  bit  lb_mode = 1'b0;
  always @(negedge clk) begin
    while (rxq.size() > 0) begin
      if (expq.size() == 0) n_bad++;
      else begin
        if (rxq[0].tdata != expq[0]) n_bad++;
        if (lb_mode && rxq[0].tlast != (n_seen % 16 == 15)) n_bad++;
        void'(expq.pop_front());
      end
      void'(rxq.pop_front());
      n_seen++;
    end
  end

  // latency of the classifier: last feature beat accepted -> result valid
  int cyc = 0, t_last = -1, lat_max = 0, lat_min = 1000;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) begin
    #4;
    if (ib.tvalid && ib_tready && ib.tlast && !lb_mode) t_last = cyc;
    if (ob.tvalid && t_last >= 0 && !lb_mode) begin
      if (cyc - t_last > lat_max) lat_max = cyc - t_last;
      if (cyc - t_last < lat_min) lat_min = cyc - t_last;
      t_last = -1;
    end
  end

  initial begin
    #300000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] bs [$];
    logic [31:0] d; axi_resp_t r;
    int f [14];
    logic [15:0] prev;
    int bad_cnt, wraps;
    m_req = '0; ib = '0;
    repeat (4) @(negedge clk);
    rst = 1'b0;

    // ---- counter through a full wrap
    bs = {32'(PERS_COUNTER)};
    for (int j = 0; j < 16; j++) bs.push_back(32'h0001_6666);
    for (int j = 0; j < 15; j++) bs.push_back(32'h0000_8888);
    load(bs);
    @(negedge clk); #4; prev = dout;
    bad_cnt = 0; wraps = 0;
    for (int t = 0; t < 70000; t++) begin
      @(negedge clk); #4;
      if (dout != prev + 16'd1) bad_cnt++;
      if (dout == 16'd0) wraps++;
      prev = dout;
    end
    check(bad_cnt === 0, $sformatf("counter steps wrong: %0d", bad_cnt));
    check(wraps === 1, $sformatf("counter wraps: %0d", wraps));

    // ---- PRBS loopback
    load('{32'(PERS_LOOPBACK)});
    lb_mode = 1'b1; rx_random = 1'b1; n_ib_stall = 0; n_seen = 0;
    @(negedge clk);
    for (int fr = 0; fr < N_FRAMES; fr++)
      for (int n = 0; n < 16; n++) begin
        expq.push_back(prbs_word());
        send_beat(expq[$], n == 15);
      end
    repeat (20) @(negedge clk);
    check(n_seen === 16 * N_FRAMES && expq.size() === 0, $sformatf("loopback beats %0d", n_seen));
    check(n_bad === 0, $sformatf("loopback beat errors %0d", n_bad));
    check(n_ib_stall > 0, "loopback saw back-pressure");
    $display("loopback: %0d beats, %0d stalls, %0d errors", n_seen, n_ib_stall, n_bad);

    // ---- classifier over a data-set-sized run
    load('{32'(PERS_BDT)});
    lb_mode = 1'b0; rx_random = 1'b0; n_seen = 0; n_bad = 0;
    @(negedge clk);
    for (int n = 0; n < N_TRACKS; n++) begin
      make_track(f);
      expq.push_back(expect_beat(f));
      for (int j = 0; j < 7; j++) send_beat({32'(f[2*j+1]), 32'(f[2*j])}, j == 6);
    end
    repeat (20) @(negedge clk);
    check(n_seen === N_TRACKS && expq.size() === 0, $sformatf("tracks scored %0d", n_seen));
    check(n_bad === 0, $sformatf("classifier mismatches %0d", n_bad));
    axil_read(32'h24, d, r);
    check(d === 32'(N_TRACKS), "track count register");
    check(lat_max * 5 < 25, $sformatf("latency %0d..%0d cycles", lat_min, lat_max));
    $display("classifier: %0d tracks, agreement %0d/%0d, latency %0d-%0d cycles",
             n_seen, n_seen - n_bad, n_seen, lat_min, lat_max);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
