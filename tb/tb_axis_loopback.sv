// tb_axis_loopback: self-checking test of the AXI-stream loopback stage.
// Random inbound valid and outbound ready patterns; every beat must come out
// once, in order and unchanged.  Also checks the one-cycle latency and the
// one-beat-per-cycle rate with no back-pressure, and that back-pressure stalls
// the inbound side.
module tb_axis_loopback;
  import efpga_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  axis64_t s_axis, m_axis;
  logic s_tready, m_tready;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  axis_loopback dut (.clk, .rst, .s_axis, .s_tready, .m_axis, .m_tready);

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

  axis64_t sent [$];
  int n_in = 0, n_out = 0, n_stall = 0;

  initial begin
    axis64_t beat;
    logic in_hs, out_hs;
    s_axis = '0; m_tready = 1'b0;
    @(negedge clk); @(negedge clk);
    rst = 1'b0;
    // phase 1: free flow, one beat per cycle with one cycle of latency
    for (int t = 0; t < 20; t++) begin
      s_axis.tvalid = 1'b1; s_axis.tdata = {32'(t), 32'($urandom)};
      s_axis.tkeep = 8'hFF; s_axis.tlast = (t % 4 == 3); m_tready = 1'b1;
      #4;
      check(s_tready, "ready in free flow");
      if (t > 0) check(m_axis.tvalid && m_axis.tdata[63:32] === 32'(t-1), "one cycle latency");
      @(negedge clk);
    end
    s_axis.tvalid = 1'b0;
    @(negedge clk);
    // phase 2: random valid / ready with scoreboard
    for (int t = 0; t < 3000; t++) begin
      if (!s_axis.tvalid || in_hs) begin
        s_axis.tvalid = $urandom_range(0, 2) != 0;
        s_axis.tdata  = {$urandom, $urandom};
        s_axis.tkeep  = 8'($urandom);
        s_axis.tlast  = $urandom_range(0, 1);
      end
      m_tready = $urandom_range(0, 2) != 0;
      #4;
      in_hs  = s_axis.tvalid && s_tready;
      out_hs = m_axis.tvalid && m_tready;
      if (s_axis.tvalid && !s_tready) n_stall++;
      if (out_hs) begin
        beat = m_axis;
        check(sent.size() > 0, "no beat out of nothing");
        if (sent.size() > 0) begin
          check(beat === sent[0], $sformatf("beat %0d matches", n_out));
          void'(sent.pop_front());
        end
        n_out++;
      end
      if (in_hs) begin sent.push_back(s_axis); n_in++; end
      @(negedge clk);
    end
    check(n_stall > 0, "back-pressure stalled the input");
    check(n_in - n_out <= 1 && n_out > 1000, $sformatf("in=%0d out=%0d", n_in, n_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
