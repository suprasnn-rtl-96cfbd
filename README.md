# SupraSNN core in SystemVerilog

SupraSNN runs spiking neural networks (leaky integrate-and-fire neurons,
any connectivity, any weight sparsity) by spreading the **synapses**, not the
neurons, over M parallel Synapse Processing Units (SPUs). One neuron's input
synapses may sit in several SPUs. Every SPU computes a partial input current
for that neuron, and a tree of adders (the Merge or ME tree) sums the parts
on their way to a single, central Neuron Unit. The tree has no buffers and
does not sort anything. It only works because an offline scheduler arranges
each SPU's list of synapse operations so that **all partial currents of one
neuron leave all SPUs in the same clock cycle**. That rule ("alignment") is
the key to the whole design: the hardware is simple because the schedule
carries the complexity.

This repository holds synthesizable RTL of the core, in the architecture's
main configuration (16 SPUs, the configuration used for a 784-116-10 MNIST
network). It also holds one self-checking testbench per block and an
end-to-end testbench at full size. The offline partitioning and scheduling
software is not part of it; the end-to-end testbench has a small scheduler
of its own that shows what such software must produce.

## 1. How a timestep flows

```
 ext_* ──► Spike Handler ──► Internal Buffer ──► Packet Injector ──► Routing Unit
  (input)        ▲              (FIFO)                                   │ {ctrl, index, bitstring}
                 │                                                       ▼
                 │                                                 MC tree (log2 M levels)
                 │                                                       │
                 │                                          SPU 0  SPU 1 ... SPU M-1
                 │                                                       │ {local index, current}
                 │                                                       ▼
                 └──── spikes + end ◄──── Neuron Unit ◄──────────── ME tree (log2 M levels)
                                              │
                                              └──► output buffer ──► obuf_*
```

Every timestep has two phases.

* **Spike phase.** The Packet Injector pops packets from the Internal
  Buffer. These are the spikes the Neuron Unit produced in the last
  timestep, plus the external input spikes of this timestep. The injector
  sends them, one per cycle, down the Multi-Cast (MC) tree. The Routing Unit
  attaches a bitstring to each spike with one bit per SPU. Each tree node
  forwards the packet only into the subtrees whose bits are set, so a spike
  reaches only the SPUs that hold a synapse of that neuron. Each SPU records
  it as one bit in its Spike Memory.
* **Compute phase.** The timestep closes when the injector has popped **two**
  end packets: one from the Neuron Unit ("all neuron updates of the last step
  are done") and one from the input ("all input spikes of this step are
  in"). The injector then sends a single end packet to every SPU. All SPUs
  leave the ready state together. Each walks its whole Operation Table (one
  entry every two cycles), sends partial currents into the ME tree, and
  finally sends an end packet of its own. The ME tree delivers one merged
  current per neuron to the Neuron Unit. The Neuron Unit updates the neuron,
  and every spike becomes a new MC packet written back into the Internal
  Buffer, for the next timestep. Spikes of neurons flagged as outputs are
  also copied to the output buffer. The end packet follows the last neuron
  through the Neuron Unit and closes the step on both paths.

The compute phase therefore takes a fixed 2·S_OT cycles plus a small pipeline
latency, whatever the activity. Latency scales with the number of non-zero
synapses per SPU, because zero weights are simply left out of the tables.

## 2. Packets

All traffic into and down the MC tree is a 2-bit `ctrl` plus an
IDX_W = ⌈log2 N⌉-bit index (`supra_pkg::mc_ctrl_e`):

| ctrl | meaning |
|------|---------|
| 00 | invalid: filler that keeps the tree running without handshakes |
| 01 | spike of neuron `index`; with the **end index** (all ones) the timestep barrier |
| 10 | select: unit `index` enters initialization, all others leave it |
| 11 | data: IDX_W bits of initialization data for the selected unit |

ME packets are {local index, current}, with no ctrl field. The local index
numbers the post-neurons 0..NP-1. Two values of every index field are
reserved: all ones is **end** and all ones minus one is **invalid** (1023
and 1022 for the 10-bit global index, 127 and 126 for the 7-bit local
index). Since the fields are ⌈log2 N⌉ and ⌈log2 NP⌉ bits wide, 2^IDX_W − 2 ≥
N global and 2^W_LI − 2 ≥ NP local indices stay usable. Exactly N = 910 and
NP = 126 fit at the defaults, and 1020 and 320 in the 64-SPU configuration.
An SPU sends the invalid local index in every cycle in which it has nothing
to merge.

## 3. Loading a network (initialization)

All memories are loaded through the same input stream, before the first end
packet. A select packet names a unit:

| unit index | unit | word | data packets per word |
|---|---|---|---|
| 2·i | Operation Table of SPU i | entry, OT_W = W_PA + W_WA + IDX_W + 2 bits (28) | 3 |
| 2·i + 1 | Unified Memory of SPU i | line, K·W_W bits (12) | 2 |
| 2·M | Routing Unit | bitstring of one neuron, M bits (16) | 2 |
| 2·M + 1 | Neuron Unit | neuron state, W_MP + IDX_W + 1 bits (16) | 2 |

Data packets that follow a select are concatenated **low bits first**, and
each completed word is written to address 0, 1, 2, … of the selected memory.
A new select restarts at address 0. Numbers in brackets are the defaults.

**Operation Table entry** (`spu.sv`, MSB first):
`{post_addr[W_PA], weight_addr[W_WA], spike_addr[IDX_W], pre_end, post_end}`

* `spike_addr`: global index of the pre-synaptic neuron. The invalid index
  (1022) makes the entry a **NOP**. NOPs fill the slots where an SPU has to
  wait so that its partial currents stay aligned with the other SPUs.
* `weight_addr = {line, select}`: a Unified Memory line holding K weights,
  and which of the K (weight k at bits [k·W_W +: W_W]). Several synapses
  with the same weight share one stored weight.
* `post_addr`: the Unified Memory line of the post-neuron, laid out as
  `{local_index[W_LI], partial_current[W_PC]}` with W_PC = K·W_W − W_LI
  (5 bits). Load the current as 0.
* `pre_end`: this is the SPU's last entry for that pre-neuron, so its spike
  bit is cleared afterwards, ready for the next timestep.
* `post_end`: this is the SPU's last entry for that post-neuron. The SPU
  sends {local index, current} into the ME tree in this entry's slot and
  writes the current back as 0.

**Routing bitstring**: bit M−1−j is set if SPU j holds any synapse whose
pre-neuron is this neuron (the left subtree takes the upper half).

**Neuron state**: `{V_m[W_MP], global_index[IDX_W], output_flag}` for
local indices 0, 1, 2, …. The global index is the index the neuron's spikes
carry. The output flag also copies those spikes to the output buffer. Input
neurons have global indices but no state.

**The scheduling rule**, which the loader must guarantee and the ME tree
checks with assertions: for every post-neuron, the `post_end` entries in all
SPUs that hold any of its synapses sit at the **same table position**. All
its other entries in an SPU come earlier, and no two post-neurons share a
position. At the defaults each SPU has 661 entries. Unused tail entries must
be NOPs.

## 4. The Synapse Processing Unit

Three single-read-port memories: the Operation Table, the Spike Memory
(a bitmap of ⌈N/W_SM⌉ rows of W_SM = 4 bits) and the Unified Memory. The
Unified Memory holds both weight lines and post-neuron lines, which is why
each entry needs two reads of it. The architecture's three stages (fetch,
memory, execute/write-back) become four cycles, because the memory stage
takes two cycles on the single read port:

| cycle | work |
|---|---|
| A | read the entry at the Operation Counter |
| B | read the weight line |
| C | register the selected weight; read the post-neuron line and the spike row |
| D | if the spike bit is set, add the weight to the partial current; write back (0 on `post_end`); clear the spike bit on `pre_end`; send the ME packet on `post_end` |

A new entry starts every second cycle. Entry i+1 reads the Unified Memory in
its cycle B/C, after entry i has written back in cycle D. So consecutive
synapses of one post-neuron need no forwarding, only the Spike Memory does
(a set or clear in the previous cycle is forwarded into the next
read-modify-write of the same row). Entry i's ME packet leaves exactly
2·i + 4 clock edges after the edge that took the end packet. The SPU's own
end packet follows at 2·S_OT + 4, and then the SPU is ready again. After
reset an SPU first clears its Spike Memory, one row per cycle, with ready
low.

## 5. The trees

* **MC switch / tree** (`mc_switch.sv`, `mc_tree.sv`). Each node registers
  {ctrl, index, bitstring}. It passes the upper half of the bitstring to its
  left child and the lower half to its right child. The OR of a half is that
  child's enable, and its inverse clears the child to an invalid packet.
  There are log2 M levels, one cycle each. A leaf whose enable is low shows
  `ctrl = 00`.
* **ME switch / tree** (`me_switch.sv`, `me_tree.sv`). Each node registers
  one packet from two: the same valid index gives the saturated sum, a
  valid index against an invalid one passes the valid packet, two ends give
  an end, and anything else gives invalid. Two different valid indices, or an
  end against a non-end, break the scheduling rule and trigger an assertion.
  There are log2 M levels, one cycle each.

## 6. The Neuron Unit

A four-stage pipeline, one neuron per cycle, with all state in one SRAM:

1. load the state of the arriving local index;
2. leak: `V − (V >>> shift)`, i.e. (1 − α)·V with α = 2^−shift;
3. accumulate: `V_upd = sat(leak + I)`;
4. threshold and write back: the neuron fires if `V_upd > V_th`. The state
   becomes `V_reset` after a spike and `V_upd` otherwise. A spike becomes the
   MC packet {01, global index}.

Outputs appear four cycles after the ME packet. Only neurons that received
an ME packet are updated, so a neuron leaks only in timesteps in which at
least one of its SPUs sends its partial current. This is always the case for
a neuron with any synapse, because `post_end` entries execute every timestep,
even with no spikes (the current is then 0). `V_reset`, `V_th` and `shift`
are static inputs.

## 7. Buffers and the timestep barrier

* **Internal Buffer** (`pkt_fifo`, 1024 × 12 bits; first word falls through,
  one push and one pop per cycle). It has one write port and two writers.
  The Spike Handler gives the Neuron Unit priority because the Neuron Unit
  cannot be stalled. The external stream is a valid/ready handshake:
  `ext_ready` is low while the Neuron Unit writes, while the buffer is full,
  and from the moment an external end packet is taken until the next
  timestep starts. So at most one external barrier is in the buffer, and the
  injector can close a step after any two end packets without knowing
  which is which.
  The handler reserves no room for the Neuron Unit; the depth does that.
  One timestep's external spikes (at most N − NP input neurons plus the end
  packet) and the Neuron Unit's output (at most NP spikes plus the end
  packet) add up to at most N + 2 = 912 packets at the defaults, so 1024
  entries cannot overflow as long as each input neuron is sent at most once
  per timestep. An assertion reports a lost Neuron Unit packet.
* **Packet Injector**. It pops only while all SPUs are ready, and after
  sending the final end packet it waits until they have left the ready
  state. After reset it counts as having seen one end packet, because there
  is no Neuron Unit step before the first timestep. `timestep` counts the
  steps started.
* **Output buffer** (`pkt_fifo`, 256 × 12). It is popped through `obuf_*`.
  A push while it is full is lost and sets the sticky `obuf_overflow`.

The external side is driven as follows: after initialization, for each
timestep send its input spikes and then one end packet. The whole stream
may be sent at once; `ext_ready` paces it.

## 8. Parameters

`supra_snn_top` defaults, and the derived widths:

| parameter | default | meaning |
|---|---|---|
| M | 16 | SPUs (power of two) |
| N | 910 | neurons, IDX_W = 10 |
| NP | 126 | post-neurons (neurons with state), W_LI = 7 |
| S_UM | 128 | Unified Memory lines, W_PA = 7 |
| S_OT | 661 | Operation Table entries |
| W_W | 4 | weight width |
| K | 3 | weights per Unified Memory line; line = 12 bits |
| W_SM | 4 | Spike Memory row width |
| SH_W | 3 | width of the leak shift |
| IBUF_DEPTH / OBUF_DEPTH | 1024 / 256 | buffer depths |

The membrane potential and the partial currents are K·W_W − W_LI = 5 bits
wide. They share the Unified Memory line with the local index, so those
widths cannot be chosen separately. The second published configuration (a
700-300-20 recurrent network for the Spiking Heidelberg Digits) is M = 64,
N = 1020, NP = 320, S_UM = 256, S_OT = 742, W_W = 7, K = 3. It gives the
12-bit potential of that configuration by the same rule. It is simulated
end to end by `tb_supra_snn_shd` (Section 10).

### Memory at the defaults

| memory | size | bits |
|---|---|---|
| routing bitstrings | N × M = 910 × 16 | 14,560 |
| Operation Tables | M × S_OT × (2·W_PA + ⌈log2 K⌉ + IDX_W + 2) = 16 × 661 × 28 | 296,128 |
| Unified Memories | M × S_UM × K·W_W = 16 × 128 × 12 | 24,576 |
| Neuron State SRAM | NP × (IDX_W + K·W_W − W_LI + 1) = 126 × 16 | 2,016 |
| Spike Memories | M × ⌈N/W_SM⌉ × W_SM = 16 × 228 × 4 | 14,592 |
| Internal Buffer, output buffer | (1024 + 256) × 12 | 15,360 |

The first four rows are the architecture's own memory-footprint formula
(337,280 bits, 42.2 KB). The formula leaves out the Spike Memories and the
two buffers.

## 9. Where this RTL departs from, or adds to, the published architecture

* **Threshold.** The neuron fires on `V_upd > V_th` (the Neuron Unit
  description and its comparator), not `≥` (the LIF equation as written).
* **Saturation.** All sums (SPU partial currents, ME merges, Neuron Unit
  accumulation) saturate. The architecture does not say what happens on
  overflow.
* **Encodings chosen here.** The NOP (an invalid spike address), the field
  order inside entries, lines and state words, the LSB-first packing of
  initialization data and the unit numbering are all choices of this RTL.
* **Added control.** The Spike Memory clear sweep after reset, the Spike
  Memory write forwarding, the injector's reset credit and its wait for the
  SPUs to leave ready, and the Spike Handler's blocking of a second external
  end packet are additions. The published description implies these
  behaviours but does not specify them.
* **Output buffer overflow** is flagged, not prevented. The architecture has
  no back-pressure from the output side.
* **Memories** are behavioural arrays (`sram_1r1w`: one read and one write
  port, registered read that holds, old data on read-during-write), which map
  onto FPGA block RAM. Nothing of the FPGA configuration itself is modelled.
* **Not included:** the offline partitioning, scheduling and packet-
  generation software, the host interfaces beyond the two packet streams,
  and the FPGA bitstream fields other than `v_reset`, `v_th` and `shift`.

## 10. Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog:

| testbench | what it checks |
|---|---|
| tb_sram_1r1w | random reads and writes against an array; read latency, hold, read-during-write |
| tb_pkt_fifo | two-cycle fall-through latency, one push and one pop per cycle, random traffic against a queue, full |
| tb_mc_switch, tb_mc_tree | delivery and filtering by bitstring, exact log2 M latency |
| tb_me_switch, tb_me_tree | merge, pass, end and invalid cases, saturation, exact latency |
| tb_routing_unit | bitstring loading through packets; bitstrings per packet type |
| tb_spu | random Operation Table with NOPs against a sequential model; every ME packet at cycle 2·i + 4; end packet; ready |
| tb_neuron_unit | LIF model with leak, saturation, reset and output flag; four-cycle latency |
| tb_spike_handler | arbitration and the three stall conditions |
| tb_packet_injector | ordering, the two-barrier rule, step and timestep, no pop while SPUs are busy |
| tb_supra_snn_top | the full-size core end to end (below) |
| tb_supra_snn_shd | the same end-to-end test with the core in its 64-SPU configuration |
| tb_supra_snn_mnist | the full-size core running a network of the MNIST network's size (784-116-10, about 10,200 synapses) |

`tb_supra_snn_top` runs the top with all defaults. It builds a random
recurrent network of 24 input and 40 hidden neurons (up to 5 synapses each,
weights −3..3) and spreads its synapses over the 16 SPUs, clustering some
neurons so that both merges and NOPs occur. It schedules the 661-entry
tables by the rule of Section 3, loads everything through the input stream
and runs 8 timesteps of random input. It then compares every spike read from
the output buffer with a behavioural LIF model. It also checks the length of
every compute phase against 2·S_OT, and counts merges, NOPs, spike-bit
clears, input stalls, spikes kept out of the output buffer and neuron spikes.
A mechanism that never happened counts as a failure. It runs in well under a
second.

`tb_supra_snn_shd` does the same with the core set to the 64-SPU
configuration of Section 8 (742-entry tables, 7-bit weights, 12-bit
potentials, α = 1/32). Its network is 120 inputs and 100 recurrent hidden
neurons with up to 8 synapses each and weights up to ±40, run for 6
timesteps. Building it takes Verilator about 40 s; the simulation takes
about a second.

`tb_supra_snn_mnist` fills the default core. Its network has the shape of
the MNIST workload: 784 inputs, 116 hidden and 10 output neurons, with each
possible synapse kept with probability 11 %. That gives about 10,200
synapses, close to the 10,427 of the quantized network. Weights are ±1..3,
which fits in two Unified Memory weight lines and leaves 126 post lines per
SPU. The synapses of each neuron are dealt round-robin over the 16 SPUs.
The Section 3 rule then packs them into about 640 of the 661 table entries.
At this load the 5-bit partial currents saturate, so the reference model
repeats the hardware's order exactly:

1. each SPU's saturating accumulation, in table order;
2. the saturating merges, in the ME tree's node order;
3. the LIF update.

The test also checks that saturation happened and that output neurons
fired.

To simulate with Verilator (5.x), from the repository root:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/supra_pkg.sv $(ls rtl/*.sv | grep -v supra_pkg) tb/tb_spu.sv \
    --top-module tb_spu
obj_dir/Vtb_spu +verilator+rand+reset+2
```

Replace `tb_spu` with any testbench name. `+verilator+rand+reset+2`
starts the simulation with random values in everything that is not reset,
the memories included, which is how the testbenches are meant to run.
