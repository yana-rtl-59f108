// yana_multicast_core: input multicast core of the three-core deployment.
// Input events are source encoded (only the id of the input neuron); the
// hidden core expects destination-encoded event packets. This core expands
// each source id into the list of packets of that input neuron, using a
// mapping table and an event-packet memory exactly like the axon stage of a
// YANA core (and the same programming codes MEM_MAP and MEM_PACKET).
//
//   in_id -> [input FIFO] -> axon stage -> [output FIFO] -> out_event
//
// One packet per cycle after two cycles per source event. `idle` is high when
// no event is queued or being expanded. That the input core multicasts
// source events into destination packets follows the architecture; building
// it from the axon stage and two queues is this implementation's choice.
module yana_multicast_core
  import yana_pkg::*;
#(
  parameter int unsigned N_INPUTS   = DEF_N_NEURONS,
  parameter int unsigned N_PACKETS  = DEF_N_SYNAPSES,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                clk,
  input  logic                reset,
  input  logic                enable,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [NEURON_W-1:0] in_id,
  output logic                out_valid,
  input  logic                out_ready,
  output event_t              out_event,
  input  mem_wr_t             mems_data,
  input  logic [N_MEMS-1:0]   mems_wena,
  output logic                idle,
  output logic                stall
);
  logic                q_valid, q_ready;
  logic [NEURON_W-1:0] q_id;
  logic [$clog2(FIFO_DEPTH+1)-1:0] q_count, o_count;
  logic                ax_valid, ax_ready, ax_idle;
  event_t              ax_event;

  yana_fifo #(.WIDTH(NEURON_W), .DEPTH(FIFO_DEPTH)) u_in_q (
    .clk, .rst(reset),
    .in_valid, .in_ready, .in_data(in_id),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_id),
    .count(q_count)
  );

  yana_axon_stage #(.N_SOURCES(N_INPUTS), .N_PACKETS(N_PACKETS)) u_axon (
    .clk, .rst(reset), .enable,
    .in_valid(q_valid), .in_ready(q_ready), .in_id(q_id),
    .out_valid(ax_valid), .out_ready(ax_ready), .out_event(ax_event),
    .map_wr_en(mems_wena[MEM_MAP]), .map_wr_addr(mems_data.addr[NEURON_W-1:0]),
    .map_wr_data(mems_data.data[MAP_W-1:0]),
    .pkt_wr_en(mems_wena[MEM_PACKET]), .pkt_wr_addr(mems_data.addr),
    .pkt_wr_data(mems_data.data[EVENT_W-1:0]),
    .idle(ax_idle), .stall
  );

  yana_fifo #(.WIDTH(EVENT_W), .DEPTH(FIFO_DEPTH)) u_out_q (
    .clk, .rst(reset),
    .in_valid(ax_valid), .in_ready(ax_ready), .in_data(ax_event),
    .out_valid, .out_ready, .out_data(out_event),
    .count(o_count)
  );

  assign idle = !q_valid && ax_idle && !out_valid;
endmodule
