// tb_dsp_slice: self-checking test of the DSP slice (8x8 multiplier, 20-bit
// accumulator).  Random operands, enables, clears and sign modes are applied
// and the accumulator compared each cycle with an integer model that wraps
// modulo 2^20; includes a long run that overflows 20 bits.
module tb_dsp_slice;
  logic clk = 1'b0, rst = 1'b1;
  logic ce, clr, is_signed;
  logic [7:0] a, b;
  logic [19:0] acc;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  dsp_slice #(.A_W(8), .B_W(8), .ACC_W(20)) dut (.clk, .rst, .ce, .clr, .is_signed, .a, .b, .acc);

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
    longint model, prod;
    int wraps = 0;
    ce = 0; clr = 0; is_signed = 0; a = 0; b = 0;
    @(negedge clk); @(negedge clk);
    rst = 1'b0;
    model = 0;
    check(acc === 0, "reset");
    for (int t = 0; t < 2000; t++) begin
      if (t % 500 == 0) is_signed = ~is_signed;
      a = 8'($urandom); b = 8'($urandom);
      ce  = (t >= 1000 && t < 1400) ? 1'b1 : ($urandom_range(0, 3) != 0);
      clr = (t >= 1000 && t < 1400) ? 1'b0 : ($urandom_range(0, 15) == 0);
      if (is_signed) prod = longint'($signed(a)) * longint'($signed(b));
      else           prod = longint'(a) * longint'(b);
      if (ce) begin
        if (clr) model = 0;
        if (model + prod >= (1 << 20) || model + prod < 0) wraps++;
        model = (model + prod) & 64'hFFFFF;
      end else if (clr) model = 0;
      @(negedge clk);
      check(acc === 20'(model), $sformatf("t=%0d acc=%h model=%h", t, acc, model[19:0]));
    end
    check(wraps > 0, "accumulator wrapped at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
