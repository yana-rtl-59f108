// yana_rx_stage: input stage (RX) of the YANA core. It merges the two event
// sources of a core, the external interconnect and the core's own feedback
// path from the TX stage, into one stream towards the Input Events FIFO, at
// one event per cycle.
//
// The architecture names the merge but not its arbitration. Here the
// feedback path has fixed priority: feedback events are spikes of this core
// and must always drain, otherwise a busy external source could block the
// core's own output. The stage holds one registered output slot; an input is
// accepted whenever the slot is empty or being emptied in the same cycle.
// `enable` low stops accepting new events. `idle` is high when the slot is
// empty. Latency: one cycle from acceptance to out_valid.
module yana_rx_stage
  import yana_pkg::*;
(
  input  logic   clk,
  input  logic   rst,
  input  logic   enable,
  input  logic   ext_valid,
  output logic   ext_ready,
  input  event_t ext_event,
  input  logic   fb_valid,
  output logic   fb_ready,
  input  event_t fb_event,
  output logic   out_valid,
  input  logic   out_ready,
  output event_t out_event,
  output logic   idle
);
  logic slot_free;

  assign slot_free = enable && (!out_valid || out_ready);
  assign fb_ready  = slot_free;
  assign ext_ready = slot_free && !fb_valid;
  assign idle      = !out_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_event <= '0;
    end else if (slot_free) begin
      out_valid <= fb_valid || ext_valid;
      out_event <= fb_valid ? fb_event : ext_event;
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end
endmodule
