// counter16: the 16-bit counter user design, built from configured LUT4AB
// cells as it would sit in the fabric.
//
// Bit k of the count is held by a "sum" cell (registered) whose LUT computes
// q[k] XOR c[k]; the carry c[k+1] = q[k] AND c[k] comes from a "carry" cell
// (combinational) and c[0] is the count enable.  Cell j's LUT contents and
// flip-flop select come from configuration word j: bits 15:0 INIT, bit 16
// ff_en.  Sum cells are j = 0..W-1, carry cells j = W..2W-2.  Only with the
// right words (sum INIT 16'h6666 registered, carry INIT 16'h8888
// combinational) does the design count, so a wrong bitstream shows at once.
// The count advances by one each enabled cycle and wraps at 2^W.
//
// The paper gives the function (a 16-bit counter on the 16-bit digital output,
// used to check that a bitstream loaded); the mapping onto cells is this
// design's own.
module counter16 #(
  parameter int unsigned W = 16
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          en,
  input  logic [31:0]   cfg [2*W-1],
  output logic [W-1:0]  count
);
  logic [W:0] c;
  assign c[0] = en;

  for (genvar k = 0; k < W; k++) begin : g_bit
    logic s_lut, s_o;
    lut4ab_cell u_sum (
      .clk, .rst, .init(cfg[k][15:0]), .ff_en(cfg[k][16]),
      .in({2'b00, c[k], count[k]}), .lut_o(s_lut), .ff_q(count[k]), .o(s_o)
    );
    if (k < W-1) begin : g_carry
      logic c_ff, c_o;
      lut4ab_cell u_carry (
        .clk, .rst, .init(cfg[W+k][15:0]), .ff_en(cfg[W+k][16]),
        .in({2'b00, c[k], count[k]}), .lut_o(c[k+1]), .ff_q(c_ff), .o(c_o)
      );
    end else begin : g_last
      assign c[W] = 1'b0;
    end
  end
endmodule
