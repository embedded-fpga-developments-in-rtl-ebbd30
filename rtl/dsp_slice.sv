// dsp_slice: the DSP primitive of a DSP_top/DSP_bot tile pair: an 8x8
// multiplier feeding a 20-bit accumulator.
//
// Each cycle with ce set the accumulator adds a*b; with clr also set the old
// sum is dropped first, so the accumulator loads a*b.  clr alone clears it.
// is_signed selects two's-complement operands (product sign-extended to 20
// bits) or unsigned ones (zero-extended).  The sum wraps modulo 2^20.  acc is
// registered: the result of a MAC is visible one cycle after ce.
//
// The paper gives the 8x8 multiplier and the 20-bit accumulator; the control
// inputs (ce, clr, is_signed) and their priority are this design's own.
module dsp_slice #(
  parameter int unsigned A_W   = 8,
  parameter int unsigned B_W   = 8,
  parameter int unsigned ACC_W = 20
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             ce,
  input  logic             clr,
  input  logic             is_signed,
  input  logic [A_W-1:0]   a,
  input  logic [B_W-1:0]   b,
  output logic [ACC_W-1:0] acc
);
  logic signed [A_W+B_W-1:0] p_s;
  logic        [A_W+B_W-1:0] p_u;
  logic        [ACC_W-1:0]   p_ext;

  assign p_s   = $signed(a) * $signed(b);
  assign p_u   = a * b;
  assign p_ext = is_signed ? ACC_W'(p_s) : ACC_W'(p_u);

  always_ff @(posedge clk) begin
    if (rst)     acc <= '0;
    else if (ce) acc <= (clr ? '0 : acc) + p_ext;
    else if (clr) acc <= '0;
  end
endmodule
