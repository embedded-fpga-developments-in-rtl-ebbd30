// lut4ab_cell: one logic cell of a LUT4AB tile: a 4-input look-up table and a
// flip-flop.
//
// The LUT output is INIT[in], with in[0] the least significant index bit.  The
// flip-flop samples the LUT output on every rising clock edge and is cleared by
// rst (the fabric holds its user logic in reset while it is not configured).
// o is the registered value when ff_en is set and the LUT output otherwise;
// lut_o and ff_q are also brought out so that a user design can feed a cell's
// own state back into it without a static combinational loop.  INIT and ff_en
// are configuration bits, constant while the fabric runs.
//
// The paper gives the cell's function (a 4-input LUT and a flip-flop; eight
// cells per tile, 448 in the 28nm fabric).  The output select, the reset and
// the extra outputs are this design's own; the switch matrix around the cell
// is not modelled.
module lut4ab_cell (
  input  logic        clk,
  input  logic        rst,
  input  logic [15:0] init,
  input  logic        ff_en,
  input  logic [3:0]  in,
  output logic        lut_o,
  output logic        ff_q,
  output logic        o
);
  assign lut_o = init[in];

  always_ff @(posedge clk) begin
    if (rst) ff_q <= 1'b0;
    else     ff_q <= lut_o;
  end

  assign o = ff_en ? ff_q : lut_o;
endmodule
