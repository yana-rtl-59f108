// yana_tx_stage: output stage (TX) of the YANA core. Every event packet the
// axon stage emits is inspected here: a packet whose destination-core field
// equals this core's CORE_ID goes back to the core's own RX stage over the
// feedback path, any other packet leaves the core on event_out.
//
// One registered slot holds the packet and its direction; the next packet
// is taken from the Output Events FIFO when the slot is empty or drains in
// the same cycle. `enable` low stops taking packets. `idle` is high when the
// slot is empty. Latency: one cycle. The routing rule follows the
// architecture; the slot and handshake are this implementation's.
module yana_tx_stage
  import yana_pkg::*;
#(
  parameter logic [CORE_W-1:0] CORE_ID = ID_HIDDEN
) (
  input  logic   clk,
  input  logic   rst,
  input  logic   enable,
  input  logic   in_valid,
  output logic   in_ready,
  input  event_t in_event,
  output logic   fb_valid,
  input  logic   fb_ready,
  output event_t fb_event,
  output logic   ext_valid,
  input  logic   ext_ready,
  output event_t ext_event,
  output logic   idle
);
  logic   slot_valid, slot_int;
  event_t slot_event;
  logic   drain;

  assign fb_valid  = slot_valid && slot_int;
  assign ext_valid = slot_valid && !slot_int;
  assign fb_event  = slot_event;
  assign ext_event = slot_event;
  assign drain     = (fb_valid && fb_ready) || (ext_valid && ext_ready);
  assign in_ready  = enable && (!slot_valid || drain);
  assign idle      = !slot_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      slot_valid <= 1'b0;
      slot_int   <= 1'b0;
      slot_event <= '0;
    end else if (in_ready) begin
      slot_valid <= in_valid;
      slot_int   <= (in_event.core == CORE_ID);
      slot_event <= in_event;
    end else if (drain) begin
      slot_valid <= 1'b0;
    end
  end
endmodule
