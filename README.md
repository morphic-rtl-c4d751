# MorphIC in SystemVerilog: a quad-core binary-weight spiking processor with stochastic on-line learning

MorphIC is a digital spiking neural network (SNN) processor. It has four cores, each with 512
leaky integrate-and-fire (LIF) neurons. Every synapse weight is a single bit, and every synapse
can learn on-line. Learning uses a stochastic version of spike-dependent synaptic plasticity
(S-SDSP): when a spike arrives at a synapse, the weight may flip with a small probability. That
probability depends on the state of the receiving neuron.

Two ideas let a large, plastic network fit in small memories:

- **Time multiplexing.** One LIF update circuit and one learning circuit per core serve all 512
  neurons. Neuron state and synapses live in single-port SRAMs.
- **A three-level event routing hierarchy.** Each neuron stores its whole outward connectivity in
  27 bits of its own memory word, so the routers need no mapping tables.
  - L0: the crossbar inside a core.
  - L1: a star router joining the four cores.
  - L2: a mesh router joining chips over four 8-bit asynchronous links.

This RTL describes one chip. It has no parameters at the top, and its defaults are the full
chip: 4 × 512 neurons, a 64-kB synapse SRAM and an 8-kB neuron SRAM per core, four links.

## The core: a crossbar walked two clocks at a time

Each core has:

- **256k L0 synapses** (from its own 512 neurons) and **256k L1 synapses** (from neurons in the
  other cores). Both sit in one 4096 × 128-bit synapse SRAM at address `{L01, i[8:0], j[8:7]}`:
  - `L01` selects the L0 or L1 half;
  - `i` is the source neuron;
  - `j` is the destination neuron.
- **32 L2 synapses per neuron.** They are kept in the top 32 bits of that neuron's word in a
  512 × 128-bit neuron SRAM.

The neuron word (`neur_word_t` in `morphic_pkg`):

| bits    | content |
|---------|---------|
| 127:96  | 32 input L2 synapses |
| 95:72   | outward L2 connectivity: dx[2:0], dy[2:0] (destination chip), cores[3:0], syn[4:0], neur[8:0] |
| 71:69   | outward L1 connectivity: one bit per other core |
| 68:50   | LIF state: Ca leak counter[3:0], Calcium Ca[3:0], Vmem[10:0] (signed) |
| 49:22   | S-SDSP parameters: Ca leak period[3:0], θ3, θ2, θ1, θm[10:0] |
| 21:0    | LIF parameters: disable, leak step[9:0], threshold[10:0] |

### Crossbar event

A spike from source `i` on L0 or L1 is handled by `core_controller`. It performs 512 synaptic
operations (SOPs), one per destination neuron `j`. Each SOP takes two clocks:

1. Read neuron `j`.
2. Write neuron `j` back, updated.

Synapse words work like this:

- At `j mod 128 = 0`, the controller also reads the 128-bit synapse word that holds the next
  128 weights.
- The new weights (after learning) are collected in a 128-bit buffer.
- At `j mod 128 = 127`, the buffer is written back in the write clock, just before the next word
  is read.

One crossbar event therefore takes 1 clock to fetch the event plus 1024 clocks. At 55 MHz that is
the 27.5 MSOP/s per core that the chip is rated at.

### Synaptic contribution

The contribution is `w · 2^m`, negated for an inhibitory axon. `m` (0–3, giving ×1/2/4/8) and the
sign come from a per-axon configuration in the parameter bank, with separate tables for L0 and
L1 axons and for the 32 L2 synapse slots.

`lif_update` handles the neuron itself:

- It adds the contribution and saturates Vmem to 11 bits.
- When Vmem reaches the threshold, the neuron fires: Vmem resets to 0 and Ca increments,
  saturating at 15.
- A leak event moves Vmem toward 0 by the leak step. Every `ca_leak` leak events it also
  decrements Ca.

### Other event types

- An **L2 event** (one synapse `syn` of neuron `neur`) is a single SOP on that neuron. The weight
  comes from the neuron word itself.
- A **virtual event** is a single SOP that adds a signed 8-bit value without any synapse.
- A **teacher event** writes Ca.
- A **leak event** sweeps all 512 neurons.

### When a neuron fires

Two things may be issued in that same write clock:

- **A local L0 event**, if L0 feedback is enabled. It goes into a scheduler FIFO of its own core
  and never leaves the core.
- **A 40-bit spike packet** toward the L1 router, if any L1 or L2 target is set. It carries the
  27 connectivity bits and the source address.

If either FIFO is full, the controller stalls in that clock until both have room.

**Limitation.** The local L0 FIFO is 16 entries deep, and only the controller drains it. If more
than 16 neurons fire during one crossbar event while L0 feedback is on, the core deadlocks.
Networks must respect this, or `L0_DEPTH` must be raised. The chip documentation does not say how
this case is handled.

## Stochastic SDSP in one bit

Learning follows the SDSP conditions:

```
up   = Vmem >= θm  and  θ1 <= Ca < θ3
down = Vmem <  θm  and  θ1 <= Ca < θ2
w' = w ? not(down and ζ) : (up and ζ)        ζ = (rnd <= q),  q = w ? q- : q+
```

How the pieces are built:

- **Random bits.** `ulfsr` is a 17-bit Galois LFSR with polynomial x^17 + x^3 + 1, unfolded 9
  times. It gives 9 fresh pseudo-random bits in every clock that a synapse is updated.
- **Probabilities.** `q+` and `q-` are 9-bit numbers (probability ≈ q/512), taken per event
  *distance*:
  - 0 for L0 events;
  - 1 for L1 events;
  - one more for every chip-to-chip hop, up to 7.

  This is how learning can be made weaker for distant sources.
- **Neuron conditions.** During a crossbar sweep, the synapse of neuron `j` is updated in the
  same SOP that updates neuron `j`. The conditions must therefore describe the neuron *before* the
  event. `ssdsp_updown_regs` holds one `up` and one `down` bit per neuron, rewritten whenever the
  neuron is written, and the learning logic reads those bits.

The learning enable and the q tables are in the parameter bank.

## Routing

Routing hops:

- **L1 router** (`l1_router`):
  - It has no buffers. An arbiter (round-robin, or priority to the fullest source FIFO) picks one
    of the four core outputs or the L2 router.
  - A core's spike is multicast, in a single clock, to the cores selected by its 3 L1 bits. Bit
    `k` of core `c` means core `(c+1+k) mod 4`. The spike is also turned into an L2 packet if its
    L2 core field is non-zero.
  - A multicast is only delivered when every destination can take it.
  - When nothing blocks it, the router moves one packet per clock, which is 55 Mpackets/s at
    55 MHz.
  - Packets arriving from L2 go to the cores named in them.
- **L2 router** (`l2_router`):
  - Every input is buffered: four AER links plus L1.
  - A single dispatcher moves one packet per clock to an output FIFO, using the same two arbiter
    modes.
  - Routing uses the packet's dx and dy fields (sign + 2-bit magnitude). While |dx| > 0 the packet
    goes East (dx ≥ 0) or West and |dx| is decremented. Then the same happens for dy with North
    and South. At (0,0) the packet goes down to L1.
  - Each hop also increments the distance field, saturating at 7.
- **Links** (`aer_tx`, `aer_rx`):
  - Each link carries a 32-bit packet as four 8-bit four-phase AER transfers, least significant
    byte first.
  - The receiver synchronizes REQ through two flip-flops, and the sender does the same for ACK.
  - A receiver withholds ACK for the first byte while its FIFO is full.

### Packet formats

These are this design's own. All are 32 bits with the type in [31:28]:

| type | name | fields |
|------|------|--------|
| 1 | L2 spike | dx[27:25] dy[24:22] cores[21:18] syn[17:13] neur[12:4] d[3:1] |
| 2,3 | L1 / L0 spike (crossbar) | cores[27:24] source[23:15] |
| 4 | virtual event | cores[27:24] neuron[23:15] value[14:7] (signed) |
| 5 | teacher event | cores[27:24] neuron[23:15] Ca[10:7] |
| 6 | leak event | cores[27:24] |
| 7 | configuration | core[27:26] mem[25:24] (0 neuron, 1 synapse, 2 parameters) addr[23:8] data[7:0] |
| 8 | monitoring request | as configuration; data[7:2] = {dx,dy} of the reply's destination |
| 9 | monitoring reply | dx[27:25] dy[24:22] core[21:20] data[19:12] |

Test events (types 2–6) and configuration or monitoring packets arrive over a link with dx =
dy = 0 and go to the cores they name.

Neuron and synapse bytes are addressed as `{word, byte[3:0]}`.

Parameter bank byte addresses:

| address | content |
|---------|---------|
| 0x000 | control: bit0 L0 feedback enable (reset 1), bit1 learning enable (reset 0) |
| 0x010 + 2d | q+ for distance d, bits 7:0 |
| 0x011 + 2d | q+ for distance d, bit 8 in bit0 |
| 0x020 + 2d, 0x021 + 2d | q− for distance d, same layout as q+ |
| 0x040 + s | configuration of L2 synapse slot s |
| 0x200 + i | L0 axon i configuration |
| 0x400 + i | L1 axon i configuration |

An axon configuration byte holds bit2 = inhibitory and bits 1:0 = exponent.

## Clock

`clock_gen` is a behavioural model, not synthesizable logic. It models a ring oscillator with
2·len + 3 stages, together with the choice between that ring and the external clock. The chip
runs from the ring while `clk_int_en` is high and the external clock is held low.

## Files

`rtl/`, one unit per file:

| file | content |
|------|---------|
| `morphic_pkg` | types, packet layouts, parameter map |
| `ulfsr` | unfolded LFSR |
| `ssdsp_update` | S-SDSP update |
| `lif_update` | LIF update |
| `ssdsp_updown_regs` | per-neuron up/down bits |
| `param_bank` | parameter bank |
| `sram_sp` | SRAM model |
| `sync_fifo` | FIFO |
| `router_arbiter` | arbiter |
| `core_controller` | core controller |
| `l0_router` | decoder, encoder, scheduler |
| `morphic_core` | one core |
| `l1_router` | L1 star router |
| `aer_rx`, `aer_tx` | link receiver and sender |
| `l2_router` | L2 mesh router |
| `clock_gen` | clock model |
| `morphic_top` | the chip |

`tb/` holds one self-checking testbench per unit. Each prints
`TB_RESULT checks=N failures=M`.

`tb_morphic_core` checks a whole core against a testbench model of both memories. It covers:

- configuration, and monitoring read-back;
- crossbar events, with the 1024-clock busy time checked;
- L2, virtual, teacher and leak events;
- deterministic learning with q = 511;
- local L0 chains;
- back-pressure stalls.

`tb_morphic_top` runs the full-size chip through its links only. It checks:

- configuration;
- a monitoring reply routed out of a link;
- an L1 multicast to three cores;
- an L2 spike leaving East with its distance incremented;
- an inbound L2 spike to two cores;
- a learned synapse row;
- teacher and leak events;
- a 40-spike burst that makes a controller stall, with both arbiters in priority mode;
- operation from the ring-oscillator clock.

It counts each of these mechanisms and fails if any never happened.

Two testbenches run network workloads on one full-size core:

- `tb_workload_mnist` maps one quarter of a rate-coded MNIST network onto a core:
  - 196 inputs arrive as L1 events;
  - 500 hidden neurons and one inhibitory neuron feed 10 outputs through their L0 rows.
  
  The weights are random, not trained. The testbench checks every output spike, the final state
  of all neurons and the 1024-clock cost of each crossbar event against an integer model. It
  also prints the largest number of spikes in one crossbar event, to show the run stays within
  the 16-entry local FIFO.
- `tb_workload_fc_learning` trains a plastic 256-input, 8-output layer on-line with teacher
  events and S-SDSP, using q = 511 so that learning is deterministic. It then checks the learned
  weight matrix and that each of the 8 patterns drives its own output highest.

`tb_two_chips` joins two full-size chips through their East and West links, with unrelated clocks.
A spike from one chip reaches an L2 synapse in two cores of the other. It arrives with distance 2,
which the testbench shows by enabling learning at that distance only. The receiving neuron then
fires back across the link.

The up and down bits follow the last write of a neuron by the core. A testbench that preloads the
neuron SRAM directly must touch the neuron once, for example with a virtual event of value 0,
before those bits match the preloaded state.

To simulate, for example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb \
    rtl/morphic_pkg.sv tb/tb_morphic_top.sv --top-module tb_morphic_top
./obj_dir/Vtb_morphic_top
```

The testbenches preload the SRAM arrays hierarchically, for speed. The SRAM models are not reset,
as with real macros.

## Where this RTL departs from, or goes beyond, the published description

**Not specified by the chip description; this design's own choices:**

- packet formats, the parameter-bank map, and the order of fields inside the LIF, S-SDSP and
  parameter ranges of the neuron word;
- FIFO depths: L2 input/output 4, scheduler 8, local L0 16, encoder 4;
- the L1-bit-to-core mapping;
- the dx/dy sign convention;
- the LIF details: reset to 0, saturation, leak toward 0, Ca +1 per spike;
- teacher events write Ca directly;
- byte-wide configuration and monitoring;
- how the monitoring reply finds its way back;
- configuration has priority over events;
- stalling on full FIFOs, and the L0-FIFO limitation above;
- all-or-nothing multicast;
- one L2 dispatch per clock;
- the ring-oscillator encoding.

**Not built:** the I/O pads. Their signals are the top-level ports.

**The arbiter modes and the ring length** are set by top-level pins. The chip may set them by
configuration instead.
