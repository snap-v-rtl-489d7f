# Cerebra-H: an event-driven spiking accelerator for a RISC-V SoC

Cerebra-H runs spiking neural networks (SNNs) as events instead of dense matrix
products. A spiking neuron costs work only when another neuron fires into it.
So the accelerator moves small spike packets around, and each packet triggers
one wide memory read that updates a whole cluster of neurons in one cycle. The
accelerator sits beside a RISC-V host core, which sends it custom
coprocessor instructions. The host loads the network, feeds inputs, advances
time step by step, and reads back the classification.

This repository holds synthesizable SystemVerilog (IEEE 1800-2017) for the
accelerator, its host-facing controller, an on-chip rate encoder and a spike
decoder. Each block has a self-checking testbench. The RISC-V cores, bus fabric,
peripherals and memories of the surrounding SoC are standard components and are
not included. The top module exposes the coprocessor command/response signals
as ports instead.

## 1. Organisation of the neurons

| level | contents | count at defaults |
|---|---|---|
| neuron | leaky integrate-and-fire (LIF) unit, 32-bit potential | 1024 |
| cluster | 32 neurons, a cluster controller, an incoming forwarder, an outgoing encoder | 32 |
| cluster group | 4 clusters, a level-1 spike router, a level-1 data router, a weight resolver with a 2048 x 1024-bit weight memory | 8 |
| accelerator | 8 groups, a level-2 spike router, a level-2 data router | 1 |

Clusters are numbered 0..31, with cluster `c` in group `c/4`. A spike packet is
11 bits, `{cluster[5:0], neuron[4:0]}`. Cluster IDs 32..63 are not hardware
clusters. They name input channels: encoder channel `ch` is sent as cluster
`32 + ch/32`, neuron `ch%32`, which gives 1024 input channels.

## 2. Two separate networks

The design keeps configuration traffic and spike traffic on different wires.

**Data/control network (8-bit bytes).** This network is used only in
initialisation mode. It is a tree of `data_router`s with a valid/ready
handshake and no buffering. A message is `{dest, len, body[len]}`. The router
decodes `dest` from the first byte, holds the chosen port for `len` bytes, then
returns to its header state.
- `dest` 0..31 is a cluster.
- `dest` 0x20+g is the weight memory of group g.
- Any other value is consumed and dropped.

**Spike network (11-bit packets).** This network is a tree of `spike_router`s.
- Every input port has a FIFO.
- Senders look only at the FIFO's full flag.
- A round-robin arbiter picks one non-empty input per cycle.
- The arbiter forwards a packet only when every output in that input's port
  map has room. The packet is then written to all of those outputs in the same
  cycle, as a multicast.

The port maps are fixed:
- At level 1, a cluster's spike goes to all four clusters of the group and up to level 2.
- At level 2, a group's spike goes to the other seven groups and to the controller.
- Packets from above go to every port below.

So every spike reaches every cluster, and filtering happens at the receiver.
Back-pressure spreads upward through the full flags. Nothing is ever dropped
in the network.

## 3. From a spike to a weight: the forwarding table

This is the central mechanism. When a spike packet reaches a cluster, the
**incoming forwarder** looks up the packet's source cluster in a 64-entry
table. Each entry is `{valid, base[10:0]}`.
- If the entry is invalid, the packet is dropped. No neuron in this cluster has
  a synapse from that source cluster.
- If it is valid, the forwarder computes the weight row `base + neuron`. It
  pushes that address into the cluster's request queue in the group's **weight
  resolver**. The queue is 8 deep; the forwarder stalls while it is full.

Each weight row is 1024 bits: 32 signed 32-bit weights, one for each neuron of
the target cluster. The resolver's fixed-priority arbiter (cluster 0 first)
grants one queue per cycle. It reads the row from the memory, which is 8 banks
of 2048 x 128 bits, and registers it onto that cluster's lane one cycle later.
All 32 neurons then add their weight into their accumulators in the same cycle.

In effect, the weight memory of a group stores, for each of its clusters,
one 32-row block per source cluster that feeds it. For example, a cluster fed
by 25 input clusters uses 25 blocks, which is 800 of the group's 2048 rows.
Where the blocks are placed is up to the software that builds the tables.
Blocks of different clusters may also share rows when their weights are
equal.

Each cluster's **outgoing encoder** keeps a 32-bit enable mask. When the
neurons fire, each firing neuron whose mask bit is set is sent as one packet,
lowest neuron first. A spike whose mask bit is clear updates only the neuron
itself. The mask is how an output layer, or a neuron with no fan-out, keeps
its traffic off the network.

## 4. The neuron

`lif_neuron` holds a 32-bit signed potential `v`, an accumulator `acc`, a
threshold, a 2-bit decay code and a 2-bit reset code. Weights are added into
`acc` with saturation as they arrive. On the cycle after a `time_step` pulse,
the neuron performs its update:

```
v_sum = decay(v) + acc                 (saturating)
fire  = v_sum > threshold
v     = fire ? reset(v_sum) : v_sum ;  acc = 0
```

The decay multiplies by 0.125, 0.25, 0.5 or 0.75, using shifts (`>>>3`, `>>>2`,
`>>>1`, `>>>1 + >>>2`). The three reset modes are:
- 0 = hold: keep `v_sum`;
- 1 = zero;
- 2 = subtract the threshold.

`done` is low only in the update cycle. A spike is a one-cycle pulse in that
same cycle. The neuron is configured by a 5-byte record: `{reset, decay}`,
then the threshold in little-endian order. Writing a record clears `v` and
`acc`.

The treatment of the four decay figures as the fraction *kept* is this
design's reading. So is the single shared 32-bit fixed-point format, for which
no binary point is needed because all arithmetic is integer.

## 5. Timesteps: how the step boundary is kept exact

All neurons update at once on `time_step`. The outcome is order-independent
within a step, because additions saturate only at the extremes. A weight must
never arrive in a neuron's update cycle, and every spike of step t must be
accumulated before step t+1 fires. The controller `accel_controller`
therefore runs each `STEP` command as a small sequence:

1. **ENC** (optional): the rate encoder scans its channels and injects the spikes of this step.
2. **DRAIN**: wait until the controller's queues are empty and the accelerator reports idle for two consecutive cycles. Idle means:
   - all router FIFOs are empty;
   - every request queue and forwarder is empty;
   - no encoder has pending spikes.
3. **TS**: a one-cycle `time_step` pulse. Every neuron updates in the next cycle.
4. **SETTLE**: wait until the spikes just produced have been sent, routed and accumulated, and the accelerator is idle again. Then answer the host with the new step count.

A step therefore lasts as long as the traffic it carries, not a fixed number
of cycles. Spikes produced at step t are integrated before the pulse of step
t+1, so they act as inputs of step t+1.

## 6. Configuration messages

Messages addressed to a cluster carry `{opcode, row, count, data[count]}`.

| opcode | meaning | data |
|---|---|---|
| 1 `LOAD_NI` | configure neuron `row` | 5-byte neuron record |
| 2 `LOAD_IF` | forwarding entry for source cluster `row` | `base[7:0]`, `{valid, 0000, base[10:8]}` |
| 3 `LOAD_OE` | outgoing enable mask | 4 bytes, little-endian |

The cluster controller buffers all the data bytes and commits the entry only
when the count is complete. Unknown opcodes are ignored.

Weight-memory messages carry `{row_lo, row_hi, count, data[count]}`. Data byte k
is bits 8k+7..8k of the row, and unsent bytes are written as zero. After reset,
each resolver sweeps its memory to zero, one row per cycle (2048 cycles).
Configuration waits for this sweep through the handshake.

## 7. Host interface

`snapv_accel_top` takes RoCC-style commands (`cmd_valid/ready`, `funct`, `rs1`,
`rs2`, `rd`) and returns `resp_valid/ready`, `rd` and 64-bit data. The function
codes are listed in `snapv_pkg::acc_funct_e`:

| code | command | effect |
|---|---|---|
| 0 | CFG_BYTE | queue one configuration byte |
| 1 | SPIKE_IN | queue one 11-bit spike for the next step |
| 2 | STEP | run one timestep; responds with the step count |
| 3 | OUT_POP | pop a packet that left the accelerator |
| 4 | SET_MODE | 1 = run, 0 = initialisation |
| 5 | STATUS | status bits |
| 6, 7 | ENC_WRITE, ENC_CTRL | encoder channel intensities, and encoder enable and channel count |
| 8–11 | DEC_READ, DEC_ARGMAX, DEC_WINDOW, DEC_CLEAR | spike-count decoder |

Details for some commands:
- **OUT_POP:** the output FIFO holds 16 packets. A packet that arrives while it is full is dropped and counted.
- **Rate encoder:** channel `ch` fires when its 8-bit intensity is above the low byte of a 16-bit Galois LFSR. The LFSR is seeded with 0xACE1, uses taps 0xB400, and steps once per channel.
- **Spike decoder:** it counts spikes per hardware neuron in 16-bit saturating counters. It also tracks the neuron with the highest count within a window of neuron IDs. A classifier reads that argmax after T steps.

A typical inference runs as follows:
1. Load the network in initialisation mode.
2. Switch to run mode.
3. Clear the decoder.
4. Write the pixel intensities.
5. Enable the encoder.
6. Issue T STEP commands.
7. Read DEC_ARGMAX.

## 8. Capacity against MNIST networks

The networks are MNIST classifiers of the form 784-H-10, with H from 16 to
256, run for T = 25..100 steps.

| H | neurons | hidden clusters | groups used | check |
|---|---|---|---|---|
| 16–64 | H+10 ≤ 74 | 1–2 | 1 | ≤ 1664 of 2048 rows |
| 128 | 138 | 4 | 2 | two hidden clusters per group, 1600 rows each |
| 256 | 266 | 8 | 4 | the output cluster's 256 rows join a group with 1600 rows |

Each configuration fits in the default size:
- The 784 inputs use 25 of the 32 input cluster IDs.
- Each hidden cluster needs 25 blocks of weight rows (800 rows).
- At most two hidden clusters fit in one group.

T only sets how many STEP commands are issued. Spike counts stay well inside
the 16-bit decoder counters. The weights must be quantised to integers by the
software that trains the network.

## 9. Where this design fills gaps

The architecture fixes the following:
- the hierarchy (8 × 4 × 32);
- 11-bit spike packets and 8-bit configuration bytes;
- 32-bit weights and 2048 × 1024-bit group memories;
- request queues of depth 8 and a fixed-priority arbiter;
- FIFO-buffered spike routers with fixed multicast port maps;
- the LIF neuron's decay rates and reset modes;
- a dynamic timestep.

The following are choices of this RTL:
- message layouts, opcode values and the neuron record;
- the forwarding-table layout (`base + neuron`) and the drop rule;
- the router FIFO depth (8) and round-robin arbitration;
- the saturating 32-bit integer arithmetic and the `>` fire test;
- the memory-clear sweep;
- the encoder's LFSR and comparison, the decoder's window and tie rule (the earliest maximum wins);
- the STEP sequence with its two-cycle idle confirmation;
- the coprocessor function codes.

There are also known departures:
- The weight memory is a plain array with an asynchronous read, as the
  architecture describes, so the read itself adds no cycle. This design does,
  however, register the selected row onto the output lane. The weights
  therefore reach the cluster one cycle after the grant. A flop-free lane
  would remove that cycle at the cost of a long combinational path.
- A synthesis flow that only offers synchronous SRAM macros would add one more
  cycle to this path.
- Power gating, clock frequency and area figures are not modelled.
- Accuracy results need the trained weights and are not reproduced.

## 10. Files and simulation

`rtl/` holds one module per file. `snapv_pkg.sv` holds shared constants and
types and must be compiled first. The hierarchy is:

```
snapv_accel_top
├── accel_controller ── sync_fifo (cfg, spike, out)
├── rate_encoder
├── spike_decoder
└── cerebra_h
    ├── spike_router (L2), data_router (L2)
    └── cluster_group ×8
        ├── spike_router (L1), data_router (L1)
        ├── weight_resolver ── sync_fifo ×4, weight_sram_bank ×8
        └── neuron_cluster ×4
            ├── cluster_controller, incoming_forwarder (sync_fifo), outgoing_encoder
            └── lif_neuron ×32
```

`tb/` holds one self-checking testbench per module. Each ends with the line
`TB_RESULT checks=N failures=M`. The files `lif_ref.svh` and `snn_ref.svh` are
reference models of the neuron and of a random recurrent network; they are
included by the testbenches.
- `tb_cerebra_h` runs the accelerator with two groups.
- `tb_snapv_accel_top` runs the full default-size design. It goes through the
  coprocessor port and compares every spike of every step with the reference
  model.
- The top-level testbench also counts these events and fails if any of them
  never happens:
  - memory clears and configuration;
  - host and encoder injection;
  - cross-group and multicast traffic;
  - full request queues and arbitration conflicts;
  - level-1 and level-2 congestion;
  - all reset modes and decay rates;
  - output pops and decoder reads.

Example with plain Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_snapv_accel_top \
  rtl/snapv_pkg.sv tb/tb_snapv_accel_top.sv -o sim
obj_dir/sim
```

The full-size top-level test takes about a minute and a half, most of it
building the model.
