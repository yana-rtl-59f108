// yana_axon_stage: axon stage of the YANA core, also the expansion engine of
// the input multicast core. For each neuron id taken from its input queue it
// loads the neuron's entry of the mapping table, {base, count}, and emits the
// `count` event packets stored at base, base+1, ... in the postsynaptic
// event-packet memory, one packet per cycle.
//
// States: IDLE (take an id, read the mapping table), LOAD (entry arrives),
// EMIT (read packets into the output register). Packets are read
// synchronously straight into the output register, so a read is issued only
// when that register is empty or drains in the same cycle; downstream
// backpressure therefore stalls the stage without losing a packet
// (`stall` flags such a cycle). Each spiking neuron costs two cycles plus one
// cycle per packet. The per-neuron connection count in a mapping table
// follows the architecture; the entry format and contiguous packet lists are
// this implementation's. `idle` is high in IDLE with an empty output
// register.
module yana_axon_stage
  import yana_pkg::*;
#(
  parameter int unsigned N_SOURCES = DEF_N_NEURONS,
  parameter int unsigned N_PACKETS = DEF_N_SYNAPSES
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 enable,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [NEURON_W-1:0]  in_id,
  output logic                 out_valid,
  input  logic                 out_ready,
  output event_t               out_event,
  // programming
  input  logic                 map_wr_en,
  input  logic [NEURON_W-1:0]  map_wr_addr,
  input  map_entry_t           map_wr_data,
  input  logic                 pkt_wr_en,
  input  logic [SYNAPSE_W-1:0] pkt_wr_addr,
  input  event_t               pkt_wr_data,
  output logic                 idle,
  output logic                 stall
);
  localparam int unsigned MA = $clog2(N_SOURCES);
  localparam int unsigned PA = $clog2(N_PACKETS);

  map_entry_t map_mem [N_SOURCES];
  event_t     pkt_mem [N_PACKETS];

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_EMIT} state_e;
  state_e state;

  map_entry_t           map_q;
  logic [PA-1:0]        addr;
  logic [COUNT_W-1:0]   remaining;
  logic                 slot_free, issue;

  assign slot_free = !out_valid || out_ready;
  assign issue     = enable && (state == S_EMIT) && (remaining != '0) && slot_free;
  assign in_ready  = enable && (state == S_IDLE);
  assign idle      = (state == S_IDLE) && !out_valid;
  assign stall     = (state == S_EMIT) && (remaining != '0) && !slot_free;

  always_ff @(posedge clk) begin
    if (map_wr_en) map_mem[map_wr_addr[MA-1:0]] <= map_wr_data;
    if (pkt_wr_en) pkt_mem[pkt_wr_addr[PA-1:0]] <= pkt_wr_data;
    map_q <= map_mem[in_id[MA-1:0]];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      addr      <= '0;
      remaining <= '0;
      out_valid <= 1'b0;
      out_event <= '0;
    end else begin
      case (state)
        S_IDLE: if (in_valid && in_ready) state <= S_LOAD;
        S_LOAD: begin
          addr      <= map_q.base[PA-1:0];
          remaining <= map_q.count;
          state     <= S_EMIT;
        end
        S_EMIT: begin
          if (issue) begin
            addr      <= addr + 1'b1;
            remaining <= remaining - 1'b1;
          end
          if (remaining == '0 || (issue && remaining == COUNT_W'(1)))
            state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
      if (issue) begin
        out_valid <= 1'b1;
        out_event <= pkt_mem[addr];
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (rst)
    out_valid && !out_ready |=> out_valid && $stable(out_event));
endmodule
