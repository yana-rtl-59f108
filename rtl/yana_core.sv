// yana_core: one YANA core, an event-driven five-stage pipeline
//
//   event_in -> RX -> [Input Events] -> Synapse -> [Hot Neurons] -> Neuron
//     -> [Spiking Neurons] -> Axon -> [Output Events] -> TX -> event_out
//                                                          \-> feedback to RX
//
// RX and the synapse stage work for timestep t+1: each arriving packet is
// folded into a per-neuron weight sum as it arrives, so raw events are never
// stored and one event per cycle is accepted. The neuron, axon and TX stages
// work for timestep t: the neuron stage updates the neurons that became hot
// during the previous timestep, the axon stage expands each spike into its
// list of event packets, and TX returns packets addressed to this core
// (destination core field == CORE_ID) to RX and sends the others out.
// Spikes of timestep t therefore arrive at their targets in timestep t+1.
//
// Timestep control: the core works on `timestep` as registered by the core
// control. done_core is high when all stages and queues are empty; the
// surrounding controller may then advance `timestep` by one. `reset`
// (synchronous, active high) empties the pipeline and clears potentials,
// timestamps, weight sums and hot flags in N_NEURONS cycles; done_core stays
// low meanwhile. `enable` low stops every stage from taking new work.
//
// Programming: mems_wena (one bit per memory, index = yana_pkg::mem_sel_e)
// writes mems_data.data to mems_data.addr of the presynaptic weights, the
// mapping table, the event-packet memory or the neuron parameters.
// Read-out: rd_req/rd_addr -> rd_ack, then rd_valid/rd_data two cycles later
// (potential leaked up to the current timestep).
//
// The stage split, the queues, the memories and the port names clock/reset/
// enable/timestep/event_in/mems_data/mems_wena/event_out/done_core follow the
// published block diagram. Queue depths, the valid/ready handshakes, the
// programming bus layout and the read-out port are this implementation's.
// The mech_* outputs are single-cycle event flags for performance counting.
module yana_core
  import yana_pkg::*;
#(
  parameter int unsigned       N_NEURONS      = DEF_N_NEURONS,
  parameter int unsigned       N_SYNAPSES     = DEF_N_SYNAPSES,
  parameter int unsigned       N_MAX          = DEF_N_MAX,
  parameter logic [CORE_W-1:0] CORE_ID        = ID_HIDDEN,
  parameter bit                SPIKE_EN       = 1'b1,
  parameter int unsigned       IN_FIFO_DEPTH  = 16,
  parameter int unsigned       OUT_FIFO_DEPTH = 16
) (
  input  logic                 clk,
  input  logic                 reset,
  input  logic                 enable,
  input  ts_t                  timestep,
  input  logic                 event_in_valid,
  output logic                 event_in_ready,
  input  event_t               event_in,
  input  mem_wr_t              mems_data,
  input  logic [N_MEMS-1:0]    mems_wena,
  output logic                 event_out_valid,
  input  logic                 event_out_ready,
  output event_t               event_out,
  output logic                 done_core,
  input  logic                 rd_req,
  input  logic [NEURON_W-1:0]  rd_addr,
  output logic                 rd_ack,
  output logic                 rd_valid,
  output u_t                   rd_data,
  output logic                 mech_bypass,
  output logic                 mech_feedback,
  output logic                 mech_spike,
  output logic                 mech_expired,
  output logic                 mech_axon_stall
);
  ts_t                 ts_q;
  logic                wbank, clr_en, stage_idle;
  logic [NEURON_W-1:0] clr_addr;

  // RX -> input FIFO
  logic   rx_valid, rx_ready, rx_idle;
  event_t rx_event;
  logic   fb_valid, fb_ready;
  event_t fb_event;
  // input FIFO -> synapse
  logic   ie_valid, ie_ready;
  event_t ie_event;
  logic [$clog2(IN_FIFO_DEPTH+1)-1:0] ie_count;
  // synapse <-> neuron
  logic                hot_valid, hot_ready;
  logic [NEURON_W-1:0] hot_id;
  logic                sum_rd_en;
  logic [NEURON_W-1:0] sum_rd_addr;
  sum_t                sum_rd_data;
  logic                syn_idle, neu_idle;
  // neuron -> spiking FIFO -> axon
  logic                spk_valid, spk_ready;
  logic [NEURON_W-1:0] spk_id;
  logic                sq_valid, sq_ready;
  logic [NEURON_W-1:0] sq_id;
  logic [$clog2(N_NEURONS+1)-1:0] sq_count;
  // axon -> output FIFO -> TX
  logic   ax_valid, ax_ready, ax_idle;
  event_t ax_event;
  logic   oe_valid, oe_ready;
  event_t oe_event;
  logic [$clog2(OUT_FIFO_DEPTH+1)-1:0] oe_count;
  logic   tx_idle;

  logic pipe_rst;
  assign pipe_rst = reset;

  yana_core_control #(.N_NEURONS(N_NEURONS)) u_ctrl (
    .clk, .reset, .timestep, .stage_idle,
    .ts_q, .wbank, .clr_en, .clr_addr, .done_core
  );

  yana_rx_stage u_rx (
    .clk, .rst(pipe_rst), .enable,
    .ext_valid(event_in_valid), .ext_ready(event_in_ready), .ext_event(event_in),
    .fb_valid, .fb_ready, .fb_event,
    .out_valid(rx_valid), .out_ready(rx_ready), .out_event(rx_event),
    .idle(rx_idle)
  );

  yana_fifo #(.WIDTH(EVENT_W), .DEPTH(IN_FIFO_DEPTH)) u_in_events (
    .clk, .rst(pipe_rst),
    .in_valid(rx_valid), .in_ready(rx_ready), .in_data(rx_event),
    .out_valid(ie_valid), .out_ready(ie_ready), .out_data(ie_event),
    .count(ie_count)
  );

  yana_synapse_stage #(.N_NEURONS(N_NEURONS), .N_SYNAPSES(N_SYNAPSES)) u_syn (
    .clk, .rst(pipe_rst), .enable, .wbank,
    .in_valid(ie_valid), .in_ready(ie_ready), .in_event(ie_event),
    .hot_valid, .hot_ready, .hot_id,
    .sum_rd_en, .sum_rd_addr, .sum_rd_data,
    .wr_en(mems_wena[MEM_WEIGHT]), .wr_addr(mems_data.addr),
    .wr_data(mems_data.data[WEIGHT_W-1:0]),
    .clr_en, .clr_addr,
    .idle(syn_idle), .bypass_hit(mech_bypass)
  );

  yana_neuron_stage #(.N_NEURONS(N_NEURONS), .N_MAX(N_MAX), .SPIKE_EN(SPIKE_EN)) u_neu (
    .clk, .rst(pipe_rst), .enable, .timestep(ts_q),
    .hot_valid, .hot_ready, .hot_id,
    .sum_rd_en, .sum_rd_addr, .sum_rd_data,
    .spk_valid, .spk_ready, .spk_id,
    .prm_wr_en(mems_wena[MEM_PARAM]), .prm_wr_addr(mems_data.addr),
    .prm_wr_data(mems_data.data[U_W-1:0]),
    .rd_req, .rd_addr, .rd_ack, .rd_valid, .rd_data,
    .clr_en, .clr_addr,
    .idle(neu_idle), .upd_fire(), .upd_expired(mech_expired)
  );

  yana_fifo #(.WIDTH(NEURON_W), .DEPTH(N_NEURONS)) u_spiking (
    .clk, .rst(pipe_rst),
    .in_valid(spk_valid), .in_ready(spk_ready), .in_data(spk_id),
    .out_valid(sq_valid), .out_ready(sq_ready), .out_data(sq_id),
    .count(sq_count)
  );

  yana_axon_stage #(.N_SOURCES(N_NEURONS), .N_PACKETS(N_SYNAPSES)) u_axon (
    .clk, .rst(pipe_rst), .enable,
    .in_valid(sq_valid), .in_ready(sq_ready), .in_id(sq_id),
    .out_valid(ax_valid), .out_ready(ax_ready), .out_event(ax_event),
    .map_wr_en(mems_wena[MEM_MAP]), .map_wr_addr(mems_data.addr[NEURON_W-1:0]),
    .map_wr_data(mems_data.data[MAP_W-1:0]),
    .pkt_wr_en(mems_wena[MEM_PACKET]), .pkt_wr_addr(mems_data.addr),
    .pkt_wr_data(mems_data.data[EVENT_W-1:0]),
    .idle(ax_idle), .stall(mech_axon_stall)
  );

  yana_fifo #(.WIDTH(EVENT_W), .DEPTH(OUT_FIFO_DEPTH)) u_out_events (
    .clk, .rst(pipe_rst),
    .in_valid(ax_valid), .in_ready(ax_ready), .in_data(ax_event),
    .out_valid(oe_valid), .out_ready(oe_ready), .out_data(oe_event),
    .count(oe_count)
  );

  yana_tx_stage #(.CORE_ID(CORE_ID)) u_tx (
    .clk, .rst(pipe_rst), .enable,
    .in_valid(oe_valid), .in_ready(oe_ready), .in_event(oe_event),
    .fb_valid, .fb_ready, .fb_event,
    .ext_valid(event_out_valid), .ext_ready(event_out_ready), .ext_event(event_out),
    .idle(tx_idle)
  );

  assign stage_idle = rx_idle && !ie_valid && syn_idle && neu_idle &&
                      !sq_valid && ax_idle && !oe_valid && tx_idle;
  assign mech_feedback = fb_valid && fb_ready;
  assign mech_spike    = spk_valid;
endmodule
