// tb_bdt_pileup: self-checking test of the pileup-classification tree.
// Random tracks whose features fall on both sides of, and exactly on, every
// threshold are scored and compared with a reference written in real numbers
// from the printed tree (thresholds and leaves as decimals, inputs divided by
// 2^9).  Checks the two-cycle latency, back-to-back tracks and that every leaf
// is reached.
module tb_bdt_pileup;
  import efpga_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  logic in_valid, out_valid, above;
  fx_t  feat [N_FEAT];
  fx_t  score;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  bdt_pileup dut (.clk, .rst, .in_valid, .feat, .out_valid, .score, .above);

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

  // reference model in real numbers; returns leaf number 0..9 and its value
  function automatic real ref_tree(input real x [N_FEAT], output int leaf);
    if (x[3] <= -0.2) begin
      if (x[13] <= 6.811) begin leaf = 0; return 0.851; end
      if (x[8] <= 2.3) begin leaf = 1; return -0.156; end
      leaf = 2; return 0.452;
    end
    if (x[2] <= -399.25) begin leaf = 3; return 0.454; end
    if (x[13] <= 5.88) begin
      if (x[4] <= 3.7) begin leaf = 4; return 0.806; end
      if (x[10] <= -0.05) begin leaf = 5; return 0.319; end
      leaf = 6; return -0.006;
    end
    if (x[8] <= -545.65) begin leaf = 7; return 0.266; end
    if (x[6] <= -515.55) begin leaf = 8; return 0.191; end
    leaf = 9; return -0.169;
  endfunction

  // pick a value near one of the thresholds that touch feature f
  function automatic int near(input int f);
    real t [$];
    real c;
    case (f)
      2: t = '{-399.25}; 3: t = '{-0.2}; 4: t = '{3.7}; 6: t = '{-515.55};
      8: t = '{2.3, -545.65}; 10: t = '{-0.05}; 13: t = '{6.811, 5.88};
      default: t = '{0.0};
    endcase
    c = t[$urandom_range(0, t.size()-1)];
    return int'($floor(c * 512.0)) + $urandom_range(0, 6) - 3;
  endfunction

  initial begin
    real x [N_FEAT];
    real v;
    int leaf, n_lat_ok;
    int hit [10];
    fx_t exp_q [$];
    logic exp_a [$];
    int  exp_t [$];
    int  cyc;
    foreach (hit[i]) hit[i] = 0;
    in_valid = 0;
    foreach (feat[i]) feat[i] = '0;
    @(negedge clk); @(negedge clk);
    rst = 1'b0;
    cyc = 0; n_lat_ok = 0;
    for (int n = 0; n < 4000 || exp_q.size() > 0; n++) begin
      in_valid = (n < 4000) && ($urandom_range(0, 3) != 0);
      if (in_valid) begin
        for (int i = 0; i < N_FEAT; i++) begin
          int r;
          r = ($urandom_range(0, 3) == 0) ? int'($urandom_range(0, 800000)) - 400000 : near(i);
          feat[i] = fx_t'(r);
          x[i] = real'(r) / 512.0;
        end
        v = ref_tree(x, leaf);
        hit[leaf]++;
        exp_q.push_back(fx_t'(int'($floor(v * 512.0))));
        exp_a.push_back(v * 512.0 >= 253.0);   // score > floor(0.4922*512) = 252
        exp_t.push_back(cyc);
      end
      #4;
      if (out_valid) begin
        check(exp_q.size() > 0, "no output without input");
        if (exp_q.size() > 0) begin
          check(score === exp_q[0] && above === exp_a[0],
                $sformatf("score %0d exp %0d above %0b", score, exp_q[0], above));
          if (cyc - exp_t[0] == 2) n_lat_ok++;
          else check(0, $sformatf("latency %0d cycles", cyc - exp_t[0]));
          void'(exp_q.pop_front()); void'(exp_a.pop_front()); void'(exp_t.pop_front());
        end
      end
      @(negedge clk);
      cyc++;
    end
    check(n_lat_ok > 2000, "two-cycle latency on every track");
    for (int l = 0; l < 10; l++) check(hit[l] > 0, $sformatf("leaf %0d reached", l));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
