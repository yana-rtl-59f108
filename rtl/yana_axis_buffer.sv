// yana_axis_buffer: AXI4-Stream FIFO buffer between the host processor and
// the accelerator. The deployment uses three of them: input events, commands
// and results. Only tvalid/tready/tdata are carried (no tlast, tkeep or
// tuser). `fill` reports the occupancy so that host software can poll it.
// The buffers themselves are part of the published system; depth, width and
// the missing sideband signals are this implementation's choice.
//
// Timing: a beat written on the slave side is visible on the master side one
// cycle later; one beat per cycle in each direction.
module yana_axis_buffer #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       s_axis_tvalid,
  output logic                       s_axis_tready,
  input  logic [WIDTH-1:0]           s_axis_tdata,
  output logic                       m_axis_tvalid,
  input  logic                       m_axis_tready,
  output logic [WIDTH-1:0]           m_axis_tdata,
  output logic [$clog2(DEPTH+1)-1:0] fill
);
  yana_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst,
    .in_valid (s_axis_tvalid),
    .in_ready (s_axis_tready),
    .in_data  (s_axis_tdata),
    .out_valid(m_axis_tvalid),
    .out_ready(m_axis_tready),
    .out_data (m_axis_tdata),
    .count    (fill)
  );

  // AXI4-Stream rule: once tvalid is high it stays high with stable tdata
  // until the handshake.
  a_s_hold: assert property (@(posedge clk) disable iff (rst)
    s_axis_tvalid && !s_axis_tready |=> s_axis_tvalid && $stable(s_axis_tdata));
  a_m_hold: assert property (@(posedge clk) disable iff (rst)
    m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata));
endmodule
