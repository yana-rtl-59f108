// yana_core_control: local control of a YANA core (core reset, busy/done
// tracking, timestep progression).
//
// After `reset` it sweeps clr_addr over all N_NEURONS neurons, one per
// cycle, so that the stages clear membrane potentials, access timestamps,
// weight sums and hot flags; configuration memories are kept. It registers
// the external `timestep` into ts_q, the timestep every stage works with;
// the low bit of ts_q selects the weight-sum bank pair (wbank = !ts_q[0] is
// filled for the next timestep). done_core is high when the sweep is over,
// every stage reports idle and ts_q already equals `timestep`: the core may
// then be moved to the next timestep. That done is derived from the stages'
// idle signals follows the architecture; the clearing sweep is this
// implementation's way of resetting the stateful memories.
//
// The external controller must change `timestep` only while done_core is
// high (asserted below).
module yana_core_control
  import yana_pkg::*;
#(
  parameter int unsigned N_NEURONS = DEF_N_NEURONS
) (
  input  logic                clk,
  input  logic                reset,
  input  ts_t                 timestep,
  input  logic                stage_idle,
  output ts_t                 ts_q,
  output logic                wbank,
  output logic                clr_en,
  output logic [NEURON_W-1:0] clr_addr,
  output logic                done_core
);
  logic clearing;

  assign clr_en    = clearing;
  assign wbank     = !ts_q[0];
  assign done_core = !clearing && stage_idle && (ts_q == timestep);

  always_ff @(posedge clk) begin
    if (reset) begin
      clearing <= 1'b1;
      clr_addr <= '0;
      ts_q     <= '0;
    end else begin
      ts_q <= timestep;
      if (clearing) begin
        clr_addr <= clr_addr + 1'b1;
        if (clr_addr == NEURON_W'(N_NEURONS - 1)) clearing <= 1'b0;
      end
    end
  end

  a_ts_only_when_done: assert property (@(posedge clk) disable iff (reset)
    (timestep != $past(timestep)) |-> $past(done_core));
endmodule
