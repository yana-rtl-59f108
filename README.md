# YANA: an event-driven spiking neural network accelerator in SystemVerilog

YANA runs spiking neural networks (SNNs) one event at a time. It does no
work for neurons that are silent. A core holds up to 2^10 neurons and 2^17
synapses. Every neuron, synapse and connection in it is handled by one
five-stage pipeline, which takes in one event per clock cycle. Neurons are
updated only in timesteps in which they receive input. The leak they
missed while silent is caught up in one step, with the help of a small
lookup table. Connections are explicit point-to-point packets, so any graph
can be mapped: recurrent, sparse, pruned, or with shared weights. When a
network is sparser, in time or in its connections, it runs proportionally
faster.

This repository holds synthesizable RTL for two things:

* the YANA core;
* the three-core deployment built around it. That deployment is an input
  multicast core, a hidden LIF core and an output leaky-integrator core,
  with a control unit and AXI4-Stream buffers toward a host processor.

Every module has a self-checking testbench.

## 1. Event packets

All traffic between and inside cores is a 29-bit packet:

```
[28:27] destination core   (2 bit)
[26:17] destination neuron (10 bit)
[16:0]  destination synapse (17 bit)
```

The packet names the synapse, that is, the index of a presynaptic weight in
the target core. It also names the neuron. So one stored weight can serve
any number of connections, and pruning a connection simply means not
storing its packet. See `yana_pkg::event_t`.

## 2. The core pipeline and its two timesteps

```
event_in -> RX -> [Input Events] -> Synapse -> [Hot Neurons] -> Neuron
                                                                 |
              feedback  <-  TX  <- [Output Events] <- Axon <- [Spiking Neurons]
                             \-> event_out
```

The key idea is that the front and back halves of the pipeline work on
**different timesteps**. The whole design is built around this.

* **RX and Synapse work for timestep t+1.** The synapse stage does not store
  arriving events. Each one is folded into a running sum of weights for its
  target neuron as it arrives. The first event to reach a neuron marks the
  neuron *hot* and queues its id in the Hot Neurons FIFO. This takes one
  event per cycle, with no event buffer that could overflow.
* **Neuron, Axon and TX work for timestep t.** They drain the sums and hot
  neurons collected during the previous timestep. The neuron stage updates
  each hot neuron. The axon stage expands each spike into its packet list.
  TX routes each packet: back into the core's own RX if it is addressed to
  this core, otherwise out on `event_out`. A spike emitted in t therefore
  lands in its targets' sums for t+1. The fed-back packets and the external
  packets mix freely in the t+1 half while the t half is still running.

Keeping the two timesteps apart takes two banks each of weight sums, hot
bitmaps and hot FIFOs (`yana_synapse_stage`). The bank being filled is
`wbank = !ts_q[0]`. The other bank belongs to the current timestep and is
read by the neuron stage. Each read clears the entry, so the bank is empty
again when the banks swap.

### Synapse stage (`yana_synapse_stage`)

This stage is a two-cycle read-modify-write pipeline that takes one event
per cycle:

* cycle A reads the weight and the neuron's sum;
* cycle B adds, saturates to 24 bits and writes back.

Two back-to-back events for the same neuron would read a stale sum. A
one-entry bypass register handles this case. It is counted as a mechanism in
the tests. The hot bitmap makes sure that a neuron enters the hot FIFO only
once per timestep. The FIFO is as deep as the neuron count, so it can never
overflow.

### Neuron stage (`yana_neuron_stage`, `yana_lif`)

This stage pops one hot neuron per cycle. It reads the neuron's potential
`u`, its last-access timestep and its weight sum `i`, then computes the
forward-Euler LIF update

```
u~ = u * (1 - 1/tau)^n + (1/tau) * i        n = timestep - last access
u' = 0  if u~ > u_th (spike, neuron queued for the axon stage)
u' = u~ otherwise
```

The power `(1 - 1/tau)^n` is never computed in hardware. It is read from a
programmable table of `N_MAX` = 16 entries, one for each n = 1..16. When
n = 0 the factor is 1. When n > 16 the old potential counts as zero. The
input term of that timestep is still added, so input that arrives after a
long silence is not lost. The timestamp is then written back.

All of this is how a silent neuron decays "for free": its leak is applied
only when it next becomes hot. Potentials are read out in the same way.
`rd_req`/`rd_addr` returns the potential leaked up to the current timestep,
without writing it back.

Number formats:

* `u` and `u_th`: signed 16-bit.
* `i`: signed 24-bit.
* The leak factors and `1/tau`: unsigned Q1.15.
* Rounding: each product is shifted right arithmetically by 15, and the sum
  saturates.

`SPIKE_EN = 0` turns the core into leaky integrators. The output core uses
this setting.

### Axon stage (`yana_axon_stage`)

For each spiking neuron, this stage reads the neuron's mapping entry
`{base (17 bit), count (18 bit)}`. It then emits the packets stored at
`base .. base+count-1`, one per cycle. A neuron costs 2 + count cycles. If
the next stage is not ready, the stage stalls without losing a packet. Stall
cycles are flagged on `stall`.

### RX and TX (`yana_rx_stage`, `yana_tx_stage`)

Each is a one-register stage. RX merges the external and feedback streams,
and feedback always wins. Feedback packets are this core's own spikes. If a
busy external source could hold them back, the core could block itself. TX
compares the destination core field with `CORE_ID`.

### Timestep progression (`yana_core_control`)

Every stage and queue reports whether it is idle. `done_core` is high when
all of the following hold:

* the core is not clearing;
* every stage and queue is empty;
* the core has already taken over the current `timestep`.

The controller outside the core may then raise `timestep` by one. It must
change `timestep` only while `done_core` is high, and an assertion checks
this. A timestep therefore lasts as long as its work, and there is no
wall-clock pacing.

A synchronous `reset` clears these, one neuron per cycle over `N_NEURONS`
cycles: potentials, timestamps, both sum banks and the hot bits. Weights,
connection lists and parameters are kept. `enable` low stops every stage
from taking new work.

### Programming port

`mems_wena` has one bit per memory, in the order
WEIGHT, MAP, PACKET, PARAM. `mems_data` carries a `{addr 17, data 36}` word.

| memory | address | data |
|---|---|---|
| WEIGHT | synapse | signed 8-bit weight |
| MAP | neuron | `{base, count}` |
| PACKET | packet index | 29-bit packet |
| PARAM | 0..15 | leak factor for n = addr+1 (Q1.15) |
| PARAM | 16 | `1/tau` (Q1.15) |
| PARAM | 17 | threshold (signed 16) |

## 3. The three-core deployment (`yana_system`)

```
input buffer -> CU -> input multicast core (0) -> hidden LIF core (1) -> output LI core (2)
command buffer -> CU (programming, timestep, run/read control)              |
output buffer <- CU <- potential read-out -----------------------------------+
```

* **Input multicast core** (`yana_multicast_core`). Input events name only
  their source channel. This core looks each source up in a mapping table
  and emits that channel's list of destination packets. It is the axon
  stage between an input FIFO and an output FIFO.
* **Hidden core.** A `yana_core` with `CORE_ID = 1` and LIF neurons. Its
  packets for core 2 go to the output core. Its packets for core 1 are fed
  back, which gives recurrent networks.
* **Output core.** A `yana_core` with `CORE_ID = 2` and `SPIKE_EN = 0`. It
  integrates the hidden spikes, and its potentials are read by the CU.
* **Control unit** (`yana_control_unit`). It parses commands, keeps the
  shared timestep, and runs a sample.
* **Buffers** (`yana_axis_buffer`). Three AXI4-Stream FIFOs, carrying
  tvalid/tready/tdata only:

  | buffer | width | depth |
  |---|---|---|
  | input | 32 bit | 16384 |
  | command | 64 bit | 1024 |
  | output | 32 bit | 1024 |

### Host protocol

Input word, 32 bit:

```
[31:16] timestep   [15:0] source channel
```

The words of a sample must be in timestep order.

Command word, 64 bit:

```
[63:60] op   [59:58] core   [57:56] memory   [52:36] address   [35:0] data
```

| op | action |
|---|---|
| 0 NOP | nothing |
| 1 RESET | resets the data path of all cores, sets the timestep to 0, and waits for the clearing sweep (about 1024 cycles). |
| 2 WRITE | one word into the given memory of the given core. |
| 3 RUN | processes `data` timesteps (details below), then pushes `{4'h2, cycles[27:0]}` to the output buffer. |
| 4 READ | pushes the output-core potential of neuron `address` as `{4'h1, neuron[11:0], u[15:0]}`. |

RUN handles each timestep t in three steps:

1. Forward every buffered input event with timestep ≤ t.
2. Wait until all three cores report done.
3. Advance t.

One sample is processed like this:

1. RESET.
2. Load the input events into the input buffer.
3. RUN for T timesteps.
4. READ each output neuron.

The weights and connection lists are written once and survive RESET.

## 4. Sizes

| item | default |
|---|---|
| neurons per core | 1024 |
| synapses (weights) per core | 131072 |
| packets per core / multicast core | 131072 |
| leak table entries `N_MAX` | 16 |
| input channels of the multicast core | 1024 |

A core's memories hold about 5.0 Mbit, mostly the packet list (3.8 Mbit)
and the weights (1.0 Mbit). The whole deployment holds 14.5 Mbit. All
memories are written as plain arrays with synchronous reads. The synthesis
tool maps them to block or ultra RAM. No vendor macros are instantiated.

The network these sizes were chosen for fits with room to spare. It has
700 input channels, 100 hidden LIF neurons and 20 outputs, the shape used
for the Spiking Heidelberg Digits task:

* 70,000 packets in the multicast core;
* 70,000 weights and 2,000 packets in the hidden core;
* 2,000 weights in the output core.

## 5. Where this RTL goes beyond the published description

The architecture gives the following:

* the pipeline stages and queues;
* the two timestep domains;
* the weight-sum preprocessing and the hot-neuron tracking;
* the deferred LIF update with its leak table and access timestamps;
* the mapping table with per-neuron counts;
* the packet format and core capacity;
* timestep progression from the stages' idle signals;
* the three-core deployment with its CU and buffers.

This RTL chose the following on its own:

* all fixed-point widths and rounding;
* the behaviour for n > N_MAX: the old potential becomes zero, but the
  current input is kept;
* feedback priority in RX;
* queue depths;
* the ping-pong bank scheme and the bypass register;
* the mapping-entry layout and contiguous packet lists;
* the programming bus and parameter address map;
* the clearing sweep on reset;
* the read-out port;
* the command set and the host word formats;
* the buffer depths;
* the core ids.

The published core reports 740 LUTs, 918 registers, 7 BRAM and 24 URAM on
the FPGA. Those numbers were not a design target here.

The processor system that runs the host software is outside this RTL. The
top-level AXI4-Stream ports are where it connects.

## 6. Verification

Each testbench in `tb/` compares the block against a model written
independently in the testbench. It prints
`TB_RESULT checks=<n> failures=<m>` and stops itself through a watchdog if
the design hangs.

* `tb_yana_fifo`, `tb_yana_rx_stage`, `tb_yana_tx_stage`,
  `tb_yana_axis_buffer`: random traffic and backpressure against a queue
  model.
* `tb_yana_lif`: the update equation against an integer reference, including
  saturation and n > N_MAX.
* `tb_yana_synapse_stage`, `tb_yana_neuron_stage`, `tb_yana_axon_stage`,
  `tb_yana_core_control`: each stage's protocol and arithmetic.
* `tb_yana_core`: a recurrent network in one core, against an event-level
  model. It counts bypass hits, feedback packets, spikes, leak expiry and
  axon stalls.
* `tb_yana_multicast_core`, `tb_yana_control_unit`: expansion and the
  command state machine.
* `tb_yana_system`: the full-size deployment at default parameters. It
  programs all cores, runs 64 timesteps of random input, and checks every
  output potential against a model. Each mechanism must happen at least
  once: bypass, feedback, spikes, leak expiry, axon stalls, timestep
  advances and `enable` stalls.
* `tb_yana_shd_workload`: the 700-100-20 network at full size with
  synthetic input. Its three runs are:

  | run | weights kept | input events | cycles |
  |---|---|---|---|
  | dense | all | all | 209,523 |
  | dense | all | half | 105,070 |
  | pruned | about 10 % | all | 41,035 |

  Run time falls almost linearly with both kinds of sparsity.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Wno-lint -Wno-style \
  -y rtl -y tb +libext+.sv rtl/yana_pkg.sv tb/tb_yana_system.sv \
  --top-module tb_yana_system -o sim
./obj_dir/sim
```

The block testbenches take a second or two each. `tb_yana_system` and
`tb_yana_shd_workload` take about 10 to 15 seconds.
