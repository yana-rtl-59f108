// yana_system: the three-core YANA deployment with its host interface.
//
//   input buffer --> input multicast core --> hidden core (LIF) --> output core (LI)
//        ^                  ^                       ^                     |
//   command buffer --> control unit (time sync, state machine, parsing)   |
//                                                                          v
//                                                                   output buffer
//
// The host writes a sample's input events ({timestep, source}) into the input
// buffer and commands into the command buffer, and reads results from the
// output buffer, all over AXI4-Stream. The control unit programs the cores,
// feeds the input events by timestamp to the multicast core, which expands
// each into destination-encoded packets for the hidden LIF core; the hidden
// core's spikes (packets addressed to core 2) go to the output core, whose
// leaky-integrator potentials are returned on request. All cores share the
// CU's timestep; the CU advances it when all cores are done.
//
// The block structure and the data flow follow the published deployment
// figure. The buffer depths, the core ids (0 input, 1 hidden, 2 output) and
// the host word formats (see yana_pkg) are this implementation's. `enable`
// stalls all cores while low. The mech_* outputs are event flags of the
// hidden core for performance counting.
module yana_system
  import yana_pkg::*;
#(
  parameter int unsigned N_NEURONS  = DEF_N_NEURONS,
  parameter int unsigned N_SYNAPSES = DEF_N_SYNAPSES,
  parameter int unsigned N_INPUTS   = DEF_N_NEURONS,
  parameter int unsigned IN_DEPTH   = 16384,
  parameter int unsigned CMD_DEPTH  = 1024,
  parameter int unsigned RES_DEPTH  = 1024
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        enable,
  input  logic        s_axis_input_tvalid,
  output logic        s_axis_input_tready,
  input  logic [31:0] s_axis_input_tdata,
  input  logic        s_axis_cmd_tvalid,
  output logic        s_axis_cmd_tready,
  input  logic [63:0] s_axis_cmd_tdata,
  output logic        m_axis_output_tvalid,
  input  logic        m_axis_output_tready,
  output logic [31:0] m_axis_output_tdata,
  output logic        busy,
  output ts_t         timestep,
  output logic        mech_bypass,
  output logic        mech_feedback,
  output logic        mech_spike,
  output logic        mech_expired,
  output logic        mech_axon_stall,
  output logic        mech_ts_advance
);
  // buffers <-> CU
  logic        in_valid, in_ready, cmd_valid, cmd_ready, res_valid, res_ready;
  logic [31:0] in_word, res_word;
  logic [63:0] cmd_word;
  logic [$clog2(IN_DEPTH+1)-1:0]  in_fill;
  logic [$clog2(CMD_DEPTH+1)-1:0] cmd_fill;
  logic [$clog2(RES_DEPTH+1)-1:0] res_fill;

  yana_axis_buffer #(.WIDTH(32), .DEPTH(IN_DEPTH)) u_input_buffer (
    .clk, .rst,
    .s_axis_tvalid(s_axis_input_tvalid), .s_axis_tready(s_axis_input_tready),
    .s_axis_tdata(s_axis_input_tdata),
    .m_axis_tvalid(in_valid), .m_axis_tready(in_ready), .m_axis_tdata(in_word),
    .fill(in_fill)
  );
  yana_axis_buffer #(.WIDTH(64), .DEPTH(CMD_DEPTH)) u_command_buffer (
    .clk, .rst,
    .s_axis_tvalid(s_axis_cmd_tvalid), .s_axis_tready(s_axis_cmd_tready),
    .s_axis_tdata(s_axis_cmd_tdata),
    .m_axis_tvalid(cmd_valid), .m_axis_tready(cmd_ready), .m_axis_tdata(cmd_word),
    .fill(cmd_fill)
  );
  yana_axis_buffer #(.WIDTH(32), .DEPTH(RES_DEPTH)) u_output_buffer (
    .clk, .rst,
    .s_axis_tvalid(res_valid), .s_axis_tready(res_ready), .s_axis_tdata(res_word),
    .m_axis_tvalid(m_axis_output_tvalid), .m_axis_tready(m_axis_output_tready),
    .m_axis_tdata(m_axis_output_tdata),
    .fill(res_fill)
  );

  // CU <-> cores
  logic                cu_core_reset, core_reset, all_done;
  mem_wr_t             mems_data;
  logic [N_MEMS-1:0]   wena_in, wena_hid, wena_out;
  logic                src_valid, src_ready;
  logic [NEURON_W-1:0] src_id;
  logic                rd_req, rd_ack, rd_valid;
  logic [NEURON_W-1:0] rd_addr;
  u_t                  rd_data;

  yana_control_unit u_cu (
    .clk, .rst,
    .cmd_valid, .cmd_ready, .cmd_data(command_t'(cmd_word)),
    .in_valid, .in_ready, .in_data(in_word_t'(in_word)),
    .res_valid, .res_ready, .res_data(res_word),
    .timestep, .core_reset(cu_core_reset), .mems_data,
    .mems_wena_input(wena_in), .mems_wena_hidden(wena_hid), .mems_wena_output(wena_out),
    .src_valid, .src_ready, .src_id, .all_done,
    .rd_req, .rd_addr, .rd_ack, .rd_valid, .rd_data,
    .busy, .ts_advance(mech_ts_advance)
  );

  // input multicast core
  logic   mc_valid, mc_ready, mc_idle;
  event_t mc_event;

  yana_multicast_core #(.N_INPUTS(N_INPUTS), .N_PACKETS(N_SYNAPSES)) u_input_core (
    .clk, .reset(core_reset), .enable,
    .in_valid(src_valid), .in_ready(src_ready), .in_id(src_id),
    .out_valid(mc_valid), .out_ready(mc_ready), .out_event(mc_event),
    .mems_data, .mems_wena(wena_in),
    .idle(mc_idle), .stall()
  );

  // hidden LIF core
  logic   h_valid, h_ready, h_done;
  event_t h_event;
  logic   h_rd_ack, h_rd_valid;
  u_t     h_rd_data;

  yana_core #(.N_NEURONS(N_NEURONS), .N_SYNAPSES(N_SYNAPSES),
              .CORE_ID(ID_HIDDEN), .SPIKE_EN(1'b1)) u_hidden_core (
    .clk, .reset(core_reset), .enable, .timestep,
    .event_in_valid(mc_valid), .event_in_ready(mc_ready), .event_in(mc_event),
    .mems_data, .mems_wena(wena_hid),
    .event_out_valid(h_valid), .event_out_ready(h_ready), .event_out(h_event),
    .done_core(h_done),
    .rd_req(1'b0), .rd_addr('0), .rd_ack(h_rd_ack), .rd_valid(h_rd_valid), .rd_data(h_rd_data),
    .mech_bypass, .mech_feedback, .mech_spike, .mech_expired, .mech_axon_stall
  );

  // output LI core (no spikes)
  logic   o_valid, o_done;
  event_t o_event;

  yana_core #(.N_NEURONS(N_NEURONS), .N_SYNAPSES(N_SYNAPSES),
              .CORE_ID(ID_OUTPUT), .SPIKE_EN(1'b0)) u_output_core (
    .clk, .reset(core_reset), .enable, .timestep,
    .event_in_valid(h_valid), .event_in_ready(h_ready), .event_in(h_event),
    .mems_data, .mems_wena(wena_out),
    .event_out_valid(o_valid), .event_out_ready(1'b1), .event_out(o_event),
    .done_core(o_done),
    .rd_req, .rd_addr, .rd_ack, .rd_valid, .rd_data,
    .mech_bypass(), .mech_feedback(), .mech_spike(), .mech_expired(), .mech_axon_stall()
  );

  // the cores are reset by the CU's command and by the system reset
  assign core_reset = rst || cu_core_reset;
  assign all_done   = mc_idle && h_done && o_done;

  // the LI output core has no spikes, so it can never emit a packet
  a_output_silent: assert property (@(posedge clk) disable iff (rst) !o_valid);
endmodule
