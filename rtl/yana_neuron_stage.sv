// yana_neuron_stage: neuron stage of the YANA core, working in the "t"
// domain. It updates only hot neurons, i.e. neurons that received at least
// one event for this timestep, and defers their leak until then.
//
// Per hot neuron (one per cycle, two-cycle pipeline):
//   cycle A  pop the id from the Hot Neurons FIFO; issue synchronous reads of
//            the neuron's state and last-access timestamp, and a
//            read-and-clear of its weight sum in the synapse stage.
//   cycle B  n = timestep - last access; yana_lif computes the new potential
//            with the leak factor from the LUT; state and timestamp are
//            written back; a spiking neuron is pushed to the Spiking Neurons
//            FIFO.
// The state/timestamp memory, the leak LUT and the event-driven update follow
// the architecture. The run-time programmable parameters (leak LUT, 1/tau,
// threshold; address map in yana_pkg) and the read-out port are this
// implementation's.
//
// Read-out: rd_req/rd_addr is served when no hot neuron waits and the
// pipeline is empty; rd_valid/rd_data follow two cycles after acceptance
// (rd_ack) and give the potential leaked up to the current timestep, without
// writing it back. SPIKE_EN = 0 turns the neurons into leaky integrators
// (LI), as in the output core.
//
// A neuron appears in the hot FIFO at most once per timestep and the
// Spiking Neurons FIFO (N_NEURONS deep) is empty when a timestep starts, so
// spk_valid never meets a full FIFO; an assertion checks this.
module yana_neuron_stage
  import yana_pkg::*;
#(
  parameter int unsigned N_NEURONS = DEF_N_NEURONS,
  parameter int unsigned N_MAX     = DEF_N_MAX,
  parameter bit          SPIKE_EN  = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 enable,
  input  ts_t                  timestep,
  // hot neurons
  input  logic                 hot_valid,
  output logic                 hot_ready,
  input  logic [NEURON_W-1:0]  hot_id,
  // weight sum read-and-clear
  output logic                 sum_rd_en,
  output logic [NEURON_W-1:0]  sum_rd_addr,
  input  sum_t                 sum_rd_data,
  // spiking neurons
  output logic                 spk_valid,
  input  logic                 spk_ready,
  output logic [NEURON_W-1:0]  spk_id,
  // parameter programming
  input  logic                 prm_wr_en,
  input  logic [SYNAPSE_W-1:0] prm_wr_addr,
  input  logic [U_W-1:0]       prm_wr_data,
  // potential read-out
  input  logic                 rd_req,
  input  logic [NEURON_W-1:0]  rd_addr,
  output logic                 rd_ack,
  output logic                 rd_valid,
  output u_t                   rd_data,
  // reset sweep
  input  logic                 clr_en,
  input  logic [NEURON_W-1:0]  clr_addr,
  output logic                 idle,
  output logic                 upd_fire,     // a neuron was updated
  output logic                 upd_expired   // ... with n > N_MAX
);
  localparam int unsigned NA = $clog2(N_NEURONS);

  u_t    state_mem [N_NEURONS];
  ts_t   ts_mem    [N_NEURONS];
  coef_t leak_lut  [N_MAX];
  coef_t inv_tau;
  u_t    u_th;

  // ---------------------------------------------------- parameter writes
  always_ff @(posedge clk) begin
    if (prm_wr_en) begin
      if (prm_wr_addr < SYNAPSE_W'(N_MAX))
        leak_lut[prm_wr_addr[$clog2(N_MAX)-1:0]] <= prm_wr_data;
      else if (prm_wr_addr == SYNAPSE_W'(N_MAX))
        inv_tau <= prm_wr_data;
      else if (prm_wr_addr == SYNAPSE_W'(N_MAX + 1))
        u_th <= prm_wr_data;
    end
  end

  // -------------------------------------------------------------- cycle A
  logic          b_valid, b_is_rd;
  logic [NA-1:0] b_addr;
  logic [NA-1:0] a_addr;
  logic          issue_hot, issue_rd;

  assign hot_ready   = enable;
  assign issue_hot   = hot_valid && hot_ready;
  assign issue_rd    = enable && rd_req && !hot_valid && !b_valid && !rd_valid;
  assign rd_ack      = issue_rd;
  assign a_addr      = issue_hot ? hot_id[NA-1:0] : rd_addr[NA-1:0];
  assign sum_rd_en   = issue_hot;
  assign sum_rd_addr = hot_id;

  u_t  b_u;
  ts_t b_last;

  always_ff @(posedge clk) begin
    b_u    <= state_mem[a_addr];
    b_last <= ts_mem[a_addr];
  end

  // -------------------------------------------------------------- cycle B
  ts_t  n;
  sum_t i_in;
  u_t   u_tilde, u_next;
  logic spike;

  assign n    = timestep - b_last;
  assign i_in = b_is_rd ? '0 : sum_rd_data;

  yana_lif #(.N_MAX(N_MAX)) u_lif (
    .u        (b_u),
    .i        (i_in),
    .n        (n),
    .leak_lut (leak_lut),
    .inv_tau  (inv_tau),
    .u_th     (u_th),
    .spike_en (SPIKE_EN),
    .u_tilde  (u_tilde),
    .u_next   (u_next),
    .spike    (spike)
  );

  assign spk_valid   = b_valid && !b_is_rd && spike;
  assign spk_id      = NEURON_W'(b_addr);
  assign upd_fire    = b_valid && !b_is_rd;
  assign upd_expired = upd_fire && (n > ts_t'(N_MAX));
  assign idle        = !hot_valid && !b_valid && !rd_valid;

  always_ff @(posedge clk) begin
    if (clr_en) begin
      state_mem[clr_addr[NA-1:0]] <= '0;
      ts_mem[clr_addr[NA-1:0]]    <= '0;
    end else if (b_valid && !b_is_rd) begin
      state_mem[b_addr] <= u_next;
      ts_mem[b_addr]    <= timestep;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      b_valid  <= 1'b0;
      b_is_rd  <= 1'b0;
      b_addr   <= '0;
      rd_valid <= 1'b0;
      rd_data  <= '0;
    end else begin
      b_valid  <= issue_hot || issue_rd;
      b_is_rd  <= issue_rd;
      b_addr   <= a_addr;
      rd_valid <= b_valid && b_is_rd;
      rd_data  <= u_tilde;
    end
  end

  a_spk_never_full: assert property (@(posedge clk) disable iff (rst)
    spk_valid |-> spk_ready);
endmodule
