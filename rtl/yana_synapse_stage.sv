// yana_synapse_stage: synapse stage of the YANA core, working in the "t+1"
// domain. It preprocesses every arriving event packet in place of buffering
// it: the presynaptic weight addressed by the packet's synapse field is added
// to the weight sum of the packet's neuron, and the neuron is marked hot for
// the next timestep. The neuron stage later applies each hot neuron's sum.
//
// Memories: the presynaptic weight table (N_SYNAPSES x WEIGHT_W, written over
// the programming port only), and two banks of weight sums, two hot bitmaps
// and two Hot Neurons FIFOs. Bank `wbank` is filled by incoming events while
// the other bank (the current timestep's) is drained by the neuron stage;
// the core swaps the banks by timestep parity. Two banks of sums follow the
// "Weight Sum Tables" of the architecture; the bitmap and the ping-pong
// scheme are this implementation's way to keep the two timesteps apart.
//
// Pipeline, one event per cycle: in cycle A the event is accepted and the
// weight and weight-sum reads are issued (synchronous read); in cycle B the
// sum is updated and written back, and, if the neuron was not hot, its id
// is pushed into the hot FIFO of bank wbank. An event for the same neuron as
// the event just before it takes the freshly written sum from a one-entry
// bypass register. Sums saturate at the SUM_W range.
//
// Neuron-side port: sum_rd_en reads the sum of sum_rd_addr in bank !wbank
// (data on sum_rd_data the next cycle) and clears it to zero. Popping a hot
// FIFO entry clears the neuron's hot bit of that bank. clr_en/clr_addr
// clears one neuron's sums and hot bits in both banks (reset sweep).
// `idle` is high when no event is in cycle B.
module yana_synapse_stage
  import yana_pkg::*;
#(
  parameter int unsigned N_NEURONS  = DEF_N_NEURONS,
  parameter int unsigned N_SYNAPSES = DEF_N_SYNAPSES
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  enable,
  input  logic                  wbank,
  // event input (from the Input Events FIFO)
  input  logic                  in_valid,
  output logic                  in_ready,
  input  event_t                in_event,
  // hot neurons of the current timestep (bank !wbank)
  output logic                  hot_valid,
  input  logic                  hot_ready,
  output logic [NEURON_W-1:0]   hot_id,
  // weight sum read-and-clear (bank !wbank)
  input  logic                  sum_rd_en,
  input  logic [NEURON_W-1:0]   sum_rd_addr,
  output sum_t                  sum_rd_data,
  // presynaptic weight programming
  input  logic                  wr_en,
  input  logic [SYNAPSE_W-1:0]  wr_addr,
  input  logic [WEIGHT_W-1:0]   wr_data,
  // reset sweep
  input  logic                  clr_en,
  input  logic [NEURON_W-1:0]   clr_addr,
  output logic                  idle,
  output logic                  bypass_hit
);
  localparam int unsigned NA = $clog2(N_NEURONS);
  localparam int unsigned SA = $clog2(N_SYNAPSES);
  localparam int unsigned CW = $clog2(N_NEURONS + 1);

  logic signed [WEIGHT_W-1:0] weight_mem [N_SYNAPSES];
  sum_t                       sum_mem0   [N_NEURONS];
  sum_t                       sum_mem1   [N_NEURONS];
  logic [N_NEURONS-1:0]       hot_map    [2];

  // ---------------------------------------------------------- cycle A
  logic            b_valid, b_bank;
  logic [NA-1:0]   b_neuron;
  logic signed [WEIGHT_W-1:0] b_weight;
  sum_t            b_sum_rd;
  logic            accept;

  assign in_ready = enable;
  assign accept   = in_valid && in_ready;
  assign idle     = !b_valid;

  always_ff @(posedge clk) begin
    if (wr_en) weight_mem[wr_addr[SA-1:0]] <= wr_data;
    b_weight <= weight_mem[in_event.synapse[SA-1:0]];
  end

  // ---------------------------------------------------------- cycle B
  logic          wb_valid;      // last write-back, for the bypass
  logic [NA-1:0] wb_neuron;
  logic          wb_bank;
  sum_t          wb_sum;
  sum_t          cur_sum, new_sum;
  logic signed [SUM_W:0] ext_sum;
  logic          was_hot;

  assign bypass_hit = b_valid && wb_valid && (wb_neuron == b_neuron) && (wb_bank == b_bank);
  assign cur_sum    = bypass_hit ? wb_sum : b_sum_rd;
  assign ext_sum    = (SUM_W+1)'(cur_sum) + (SUM_W+1)'(b_weight);
  always_comb begin
    if (ext_sum > (SUM_W+1)'(sum_t'({1'b0, {(SUM_W-1){1'b1}}})))
      new_sum = {1'b0, {(SUM_W-1){1'b1}}};
    else if (ext_sum < (SUM_W+1)'(sum_t'({1'b1, {(SUM_W-1){1'b0}}})))
      new_sum = {1'b1, {(SUM_W-1){1'b0}}};
    else
      new_sum = sum_t'(ext_sum);
  end
  assign was_hot = hot_map[b_bank][b_neuron];

  // hot FIFOs, one per bank
  logic                hf_push   [2];
  logic                hf_pop    [2];
  logic                hf_valid  [2];
  logic                hf_iready [2];
  logic [NEURON_W-1:0] hf_data   [2];
  logic [CW-1:0]       hf_count  [2];
  logic                rbank;

  assign rbank = !wbank;

  for (genvar k = 0; k < 2; k++) begin : g_hot
    assign hf_push[k] = b_valid && !was_hot && (b_bank == 1'(k));
    assign hf_pop[k]  = hot_ready && hf_valid[k] && (rbank == 1'(k));
    yana_fifo #(.WIDTH(NEURON_W), .DEPTH(N_NEURONS)) u_hot_fifo (
      .clk, .rst,
      .in_valid (hf_push[k]),
      .in_ready (hf_iready[k]),
      .in_data  (NEURON_W'(b_neuron)),
      .out_valid(hf_valid[k]),
      .out_ready(hf_pop[k]),
      .out_data (hf_data[k]),
      .count    (hf_count[k])
    );
  end

  assign hot_valid = hf_valid[rbank];
  assign hot_id    = hf_data[rbank];

  // weight sum banks: port 1 = event update (bank b_bank),
  //                   port 2 = neuron read-and-clear (bank rbank)
  logic [NA-1:0] rd_a;
  assign rd_a = in_event.neuron[NA-1:0];

  always_ff @(posedge clk) begin
    // event-side read for cycle B
    b_sum_rd <= wbank ? sum_mem1[rd_a] : sum_mem0[rd_a];
    // neuron-side read-and-clear
    sum_rd_data <= rbank ? sum_mem1[sum_rd_addr[NA-1:0]] : sum_mem0[sum_rd_addr[NA-1:0]];
    if (clr_en) begin
      sum_mem0[clr_addr[NA-1:0]] <= '0;
      sum_mem1[clr_addr[NA-1:0]] <= '0;
    end else begin
      if (b_valid && !b_bank) sum_mem0[b_neuron] <= new_sum;
      if (b_valid &&  b_bank) sum_mem1[b_neuron] <= new_sum;
      if (sum_rd_en && !rbank) sum_mem0[sum_rd_addr[NA-1:0]] <= '0;
      if (sum_rd_en &&  rbank) sum_mem1[sum_rd_addr[NA-1:0]] <= '0;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      b_valid   <= 1'b0;
      b_bank    <= 1'b0;
      b_neuron  <= '0;
      wb_valid  <= 1'b0;
      wb_neuron <= '0;
      wb_bank   <= 1'b0;
      wb_sum    <= '0;
      hot_map[0] <= '0;
      hot_map[1] <= '0;
    end else begin
      b_valid  <= accept;
      b_bank   <= wbank;
      b_neuron <= rd_a;
      wb_valid  <= b_valid;
      wb_neuron <= b_neuron;
      wb_bank   <= b_bank;
      wb_sum    <= new_sum;
      if (clr_en) begin
        hot_map[0][clr_addr[NA-1:0]] <= 1'b0;
        hot_map[1][clr_addr[NA-1:0]] <= 1'b0;
      end
      if (b_valid) hot_map[b_bank][b_neuron] <= 1'b1;
      if (hf_pop[0]) hot_map[0][hf_data[0][NA-1:0]] <= 1'b0;
      if (hf_pop[1]) hot_map[1][hf_data[1][NA-1:0]] <= 1'b0;
    end
  end

  // A neuron enters a hot FIFO at most once per timestep, so DEPTH =
  // N_NEURONS can never overflow.
  a_hot_no_overflow0: assert property (@(posedge clk) disable iff (rst)
    hf_push[0] |-> hf_iready[0]);
  a_hot_no_overflow1: assert property (@(posedge clk) disable iff (rst)
    hf_push[1] |-> hf_iready[1]);
  // the neuron stage never clears a sum the event side is writing
  a_bank_apart: assert property (@(posedge clk) disable iff (rst)
    b_valid && sum_rd_en |-> b_bank != rbank);
endmodule
