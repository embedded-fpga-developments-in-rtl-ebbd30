// tb_counter16: self-checking test of the counter user design.  With the
// correct cell configuration the count must rise by one per enabled cycle,
// hold when disabled and wrap from 16'hFFFF to 0; with a corrupted
// configuration word it must not count correctly.
module tb_counter16;
  logic clk = 1'b0, rst = 1'b1, en = 1'b0;
  logic [31:0] cfg [31];
  logic [15:0] count;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  counter16 #(.W(16)) dut (.clk, .rst, .en, .cfg, .count);

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
    int exp_c, n_wrap;
    for (int j = 0; j < 16; j++) cfg[j] = 32'h0001_6666;      // sum: q ^ c, registered
    for (int j = 16; j < 31; j++) cfg[j] = 32'h0000_8888;     // carry: q & c, combinational
    @(negedge clk); @(negedge clk);
    rst = 1'b0;
    check(count === 0, "reset");
    exp_c = 0; n_wrap = 0;
    for (int t = 0; t < 70000; t++) begin
      en = (t < 300) ? ($urandom_range(0, 1) == 1) : 1'b1;
      @(negedge clk);
      if (en) begin
        if (exp_c == 16'hFFFF) n_wrap++;
        exp_c = (exp_c + 1) & 16'hFFFF;
      end
      if (t < 400 || t % 97 === 0 || exp_c < 4) check(count === 16'(exp_c), $sformatf("t=%0d count=%h exp=%h", t, count, exp_c));
    end
    check(n_wrap === 1, "counter wrapped once");
    // corrupt the carry cell of bit 3: the count must go wrong
    rst = 1'b1; @(negedge clk); rst = 1'b0;
    cfg[16+3] = 32'h0000_0000;
    en = 1'b1;
    repeat (20) @(negedge clk);
    check(count !== 16'd20, "corrupted bitstream does not count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
