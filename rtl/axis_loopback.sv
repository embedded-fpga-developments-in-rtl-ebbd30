// axis_loopback: the AXI-stream loopback user design: inbound stream to
// outbound stream through a single register stage with back-pressure.
//
// The stage holds one beat.  It accepts a beat (s_tready high) when it is
// empty or when its beat leaves in the same cycle, so an unstalled stream
// passes at one beat per cycle with one cycle of latency.  When the outbound
// side holds off (m_tready low) with the stage full, s_tready drops and the
// inbound side stalls; no beat is lost or duplicated.  tdata, tkeep and tlast
// pass unchanged.
//
// From the paper: loopback through one register stage with back-pressure
// handshaking.  The standard AXI-stream rules are assumed for the handshake.
module axis_loopback
  import efpga_pkg::*;
(
  input  logic    clk,
  input  logic    rst,
  input  axis64_t s_axis,
  output logic    s_tready,
  output axis64_t m_axis,
  input  logic    m_tready
);
  assign s_tready = !m_axis.tvalid || m_tready;

  always_ff @(posedge clk) begin
    if (rst) m_axis <= '0;
    else if (s_tready) m_axis <= s_axis.tvalid ? s_axis : '0;
  end

  a_hold: assert property (@(posedge clk) disable iff (rst)
    m_axis.tvalid && !m_tready |=> m_axis.tvalid && $stable(m_axis.tdata));
endmodule
