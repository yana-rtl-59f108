// yana_pkg: types and constants shared by the YANA core, the input multicast
// core, the control unit and the system top.
//
// The event packet layout [ dest core 2b | dest neuron 10b | dest synapse 17b ]
// and the core capacity (2^10 neurons, 2^17 synapses) follow the published
// architecture. All fixed-point widths, the memory-select codes of the
// programming bus and the command encoding of the control unit are choices of
// this implementation; the architecture only states that the neuron update is
// computed in fixed point.
package yana_pkg;

  // ---------------------------------------------------------------- packet
  localparam int unsigned CORE_W    = 2;
  localparam int unsigned NEURON_W  = 10;
  localparam int unsigned SYNAPSE_W = 17;
  localparam int unsigned EVENT_W   = CORE_W + NEURON_W + SYNAPSE_W;  // 29

  typedef struct packed {
    logic [CORE_W-1:0]    core;
    logic [NEURON_W-1:0]  neuron;
    logic [SYNAPSE_W-1:0] synapse;
  } event_t;

  // ------------------------------------------------------- default sizes
  localparam int unsigned DEF_N_NEURONS  = 1 << NEURON_W;   // 1024
  localparam int unsigned DEF_N_SYNAPSES = 1 << SYNAPSE_W;  // 131072

  // ------------------------------------------------------ fixed point
  localparam int unsigned WEIGHT_W = 8;   // signed presynaptic weight
  localparam int unsigned SUM_W    = 24;  // signed weight sum (saturating)
  localparam int unsigned U_W      = 16;  // signed membrane potential
  localparam int unsigned TS_W     = 16;  // timestep / access timestamp
  localparam int unsigned FRAC_W   = 15;  // leak factor and 1/tau are Q1.15
  localparam int unsigned COEF_W   = 16;  // unsigned width of Q1.15 coefficient
  localparam int unsigned DEF_N_MAX = 16; // leak LUT entries, n = 1..N_MAX

  localparam logic [COEF_W-1:0] COEF_ONE = COEF_W'(1) << FRAC_W;

  typedef logic signed [U_W-1:0]   u_t;
  typedef logic signed [SUM_W-1:0] sum_t;
  typedef logic [TS_W-1:0]         ts_t;
  typedef logic [COEF_W-1:0]       coef_t;

  // ---------------------------------------------------- axon mapping table
  localparam int unsigned COUNT_W = SYNAPSE_W + 1;
  typedef struct packed {
    logic [SYNAPSE_W-1:0] base;   // first packet of the neuron's list
    logic [COUNT_W-1:0]   count;  // number of packets in the list
  } map_entry_t;
  localparam int unsigned MAP_W = SYNAPSE_W + COUNT_W;  // 35

  // --------------------------------------------- memory programming bus
  // mems_wena is one-hot over the core's programmable memories.
  typedef enum logic [1:0] {
    MEM_WEIGHT = 2'd0,  // presynaptic weights        (addr: synapse)
    MEM_MAP    = 2'd1,  // axon mapping table         (addr: neuron)
    MEM_PACKET = 2'd2,  // postsynaptic event packets (addr: packet index)
    MEM_PARAM  = 2'd3   // leak LUT, 1/tau, threshold (addr: see below)
  } mem_sel_e;
  localparam int unsigned N_MEMS = 4;

  localparam int unsigned MEM_DATA_W = 36;
  typedef struct packed {
    logic [SYNAPSE_W-1:0]  addr;
    logic [MEM_DATA_W-1:0] data;
  } mem_wr_t;

  // MEM_PARAM address map: 0 .. N_MAX-1 leak LUT entry for n = addr+1,
  // N_MAX: 1/tau (Q1.15), N_MAX+1: threshold (signed, membrane units).

  // ------------------------------------------------- control unit words
  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,
    OP_RESET = 4'd1,  // reset the data path of all cores
    OP_WRITE = 4'd2,  // write one word of a core memory
    OP_RUN   = 4'd3,  // run timesteps 0 .. data-1 on the buffered input
    OP_READ  = 4'd4   // read one output-core potential into the output buffer
  } opcode_e;

  // 64-bit command: [63:60] op, [59:58] core, [57:56] mem, [52:36] addr, [35:0] data
  typedef struct packed {
    opcode_e               op;
    logic [CORE_W-1:0]     core;
    mem_sel_e              mem;
    logic [2:0]            rsvd;
    logic [SYNAPSE_W-1:0]  addr;
    logic [MEM_DATA_W-1:0] data;
  } command_t;

  // 32-bit input event: [31:16] timestep, [15:0] source neuron
  typedef struct packed {
    logic [15:0] ts;
    logic [15:0] src;
  } in_word_t;

  // 32-bit result words
  localparam logic [3:0] RES_POTENTIAL = 4'h1;  // [27:16] neuron, [15:0] u
  localparam logic [3:0] RES_RUN_DONE  = 4'h2;  // [27:0] clock cycles of the run

  // core ids of the three-core deployment
  localparam logic [CORE_W-1:0] ID_INPUT  = 2'd0;
  localparam logic [CORE_W-1:0] ID_HIDDEN = 2'd1;
  localparam logic [CORE_W-1:0] ID_OUTPUT = 2'd2;

endpackage
