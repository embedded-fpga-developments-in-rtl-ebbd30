// tb_lut4ab_cell: self-checking test of the LUT4AB logic cell.  For random LUT
// contents and every input pattern, checks the combinational output against
// the truth table, the flip-flop one cycle later, the output select and reset.
module tb_lut4ab_cell;
  logic clk = 1'b0, rst = 1'b1;
  logic [15:0] init;
  logic        ff_en;
  logic [3:0]  in;
  logic        lut_o, ff_q, o;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  lut4ab_cell dut (.clk, .rst, .init, .ff_en, .in, .lut_o, .ff_q, .o);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic expect_v;
    init = 16'h0; ff_en = 1'b0; in = 4'h0;
    @(negedge clk); @(negedge clk);
    check(ff_q === 1'b0, "reset clears flip-flop");
    rst = 1'b0;
    for (int t = 0; t < 20; t++) begin
      init  = (t == 0) ? 16'h6666 : (t == 1) ? 16'h8888 : 16'($urandom);
      for (int v = 0; v < 16; v++) begin
        in = 4'(v);
        ff_en = $urandom_range(0, 1) == 1;
        // truth table written out bit by bit
        expect_v = (init >> v) & 16'h1;
        #1;
        check(lut_o === expect_v, $sformatf("lut init=%h in=%0d", init, v));
        check(o === (ff_en ? ff_q : expect_v), "output select");
        @(negedge clk);
        check(ff_q === expect_v, $sformatf("ff init=%h in=%0d", init, v));
        #1;
        check(o === (ff_en ? expect_v : lut_o), "registered output");
      end
    end
    init = 16'hFFFF; @(negedge clk);
    check(ff_q === 1'b1, "ff set");
    rst = 1'b1; @(negedge clk);
    check(ff_q === 1'b0, "reset clears flip-flop again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
