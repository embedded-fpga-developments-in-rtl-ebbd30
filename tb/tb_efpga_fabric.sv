// tb_efpga_fabric: self-checking test of the eFPGA fabric model with each of
// its user designs.  Drives the bitstream port directly and checks: outputs
// idle before configuration; the counter bitstream counting one per cycle on
// dout and from_fab[0]; reconfiguration to the loopback design and random
// traffic with back-pressure; reconfiguration to the classifier and random
// tracks scored against a reference tree; the DSP personality's multiply-
// accumulate; and that excess bitstream words are dropped.
module tb_efpga_fabric;
  import efpga_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  logic cfg_start = 0, cfg_wr = 0, cfg_done = 0, configured;
  logic [31:0] cfg_data = '0;
  logic [31:0] to_fab [2];
  logic [31:0] from_fab [4];
  axis64_t ib, ob;
  logic ib_tready, ob_tready;
  logic [15:0] dout;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  efpga_fabric dut (
    .clk, .rst, .cfg_start, .cfg_wr, .cfg_data, .cfg_done, .configured,
    .to_fab, .from_fab, .ib_axis(ib), .ib_tready, .ob_axis(ob), .ob_tready, .dout
  );

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
    @(negedge clk); cfg_start = 1; @(negedge clk); cfg_start = 0;
    foreach (words[i]) begin cfg_wr = 1; cfg_data = words[i]; @(negedge clk); end
    cfg_wr = 0; cfg_done = 1; @(negedge clk); cfg_done = 0;
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] bs [$];
    logic [63:0] exp_q [$];
    int f [14];
    logic [15:0] d0;
    ib = '0; to_fab[0] = '0; to_fab[1] = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    @(negedge clk); #4;
    check(!configured && dout === 0 && !ib_tready && !ob.tvalid, "idle before configuration");

    // ---- counter
    bs = {32'(PERS_COUNTER)};
    for (int j = 0; j < 16; j++) bs.push_back(32'h0001_6666);
    for (int j = 0; j < 15; j++) bs.push_back(32'h0000_8888);
    load(bs);
    #4; d0 = dout;
    check(configured, "configured after counter load");
    for (int t = 1; t <= 50; t++) begin
      @(negedge clk); #4;
      check(dout === d0 + 16'(t) && from_fab[0] === 32'(dout), $sformatf("counter step %0d: %h", t, dout));
    end

    // ---- loopback, then excess words: 70 words into a 64-word memory
    bs = {32'(PERS_LOOPBACK)};
    for (int j = 1; j < 70; j++) bs.push_back(32'($urandom));
    load(bs);
    #4; check(dout === 0 && ib_tready, "loopback active, counter gone");
    rx_random = 1'b1;
    rxq.delete();
    @(negedge clk);
    for (int n = 0; n < 400; n++) begin
      exp_q.push_back({32'(n), $urandom});
      send_beat(exp_q[$], n % 8 == 7);
    end
    repeat (20) @(negedge clk);
    check(rxq.size() === 400, $sformatf("loopback beats out %0d", rxq.size()));
    for (int n = 0; n < 400 && n < rxq.size(); n++)
      check(rxq[n].tdata === exp_q[n] && rxq[n].tlast === (n % 8 === 7), $sformatf("loopback beat %0d", n));
    check(n_ib_stall > 0, "loopback stalled by back-pressure");
    exp_q.delete(); rxq.delete();

    // ---- classifier
    load('{32'(PERS_BDT)});
    n_ib_stall = 0;
    @(negedge clk);
    for (int n = 0; n < 300; n++) begin
      make_track(f);
      exp_q.push_back(expect_beat(f));
      for (int j = 0; j < 7; j++)
        send_beat({32'(f[2*j+1]), 32'(f[2*j])}, j == 6);
      if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 5)) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    check(rxq.size() === 300, $sformatf("classifier results %0d", rxq.size()));
    for (int n = 0; n < 300 && n < rxq.size(); n++)
      check(rxq[n].tdata === exp_q[n] && rxq[n].tlast, $sformatf("track %0d score %h exp %h", n, rxq[n].tdata, exp_q[n]));
    check(from_fab[1] === 300 && dout === 16'd300, "tracks counted");
    begin
      int na; na = 0;
      foreach (exp_q[n]) na += int'(exp_q[n][32]);
      check(from_fab[2] === 32'(na), "above-threshold count");
    end
    check(n_ib_stall > 0, "classifier stalled its input");
    exp_q.delete(); rxq.delete();

    // ---- DSP slices: slice k accumulates a_k * b, signed
    load('{32'(PERS_DSP)});
    begin
      int accm [4];
      logic tog; tog = 1'b0;
      for (int k = 0; k < 4; k++) accm[k] = 0;
      for (int s = 0; s < 40; s++) begin
        logic [7:0] b; logic [31:0] a;
        logic [3:0] ce, clr;
        b = 8'($urandom); a = $urandom; ce = 4'($urandom); clr = (s % 13 == 0) ? 4'hF : 4'h0;
        tog = ~tog;
        to_fab[1] = a;
        to_fab[0] = {tog, 14'd0, 1'b1, clr, ce, b};
        for (int k = 0; k < 4; k++) begin
          int p; p = int'($signed(a[8*k +: 8])) * int'($signed(b));
          if (ce[k]) accm[k] = clr[k] ? p : accm[k] + p;
          else if (clr[k]) accm[k] = 0;
        end
        repeat (3) @(negedge clk);
        for (int k = 0; k < 4; k++)
          check(from_fab[k][19:0] === 20'(accm[k]) && from_fab[k][31:20] === {12{from_fab[k][19]}},
                $sformatf("dsp %0d step %0d: %h exp %h", k, s, from_fab[k], 20'(accm[k])));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
