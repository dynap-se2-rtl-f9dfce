# DYNAP-SE2 event fabric in SystemVerilog

DYNAP-SE2 is a mixed-signal neuromorphic processor. Its 1024 silicon neurons compute with
analog currents in continuous time. Neurons talk to each other only through *address
events*: short digital words sent when a neuron spikes. This code models that digital side:

- how a spike becomes a set of event words;
- how those words travel within the chip and across a 2D grid of chips;
- how a word reaches the right synapses through a content-addressable memory;
- how input from event cameras and from a host is turned into events and configuration.

The analog neurons and synapses are present as discrete-time behavioural models. A spike
can therefore travel the full loop (synapse → dendrite → soma → encoder → router →
synapse) in simulation.

The chip itself is asynchronous. This code is synchronous, with one clock and an
asynchronous active-low reset. Wherever the chip uses a self-timed channel, the code uses a
valid/ready stream. At the pins, the code uses four-phase req/ack handshakes with two-flop
synchronisers, so that a real asynchronous neighbour could be attached.

## Tags instead of addresses

Routing does not use a neuron's address. Each neuron owns four 23-bit *source words*
`{tag[10:0], dy[3:0], dx[3:0], cores[3:0]}`, and on a spike it sends all four. Each synapse
holds one 11-bit tag in a CAM cell. When a tag is broadcast into a core, every synapse whose
CAM word equals it is stimulated, in one step.

- Fan-out is up to four words per neuron. Each word can reach any subset of the four cores
  on any chip within ±7 hops.
- Fan-in is 64 synapses per neuron.
- Many senders can share one tag. For example, an all-to-all population needs a single
  tag, and a ring of neighbours needs one tag per neuron.

A word with `cores = 0000` is dropped by the router. Unused source slots are cheap this way.

### Event word (24 bits inside the chip and on the grid buses)

| bit 23 | 22..12    | 11..8 | 7..4 | 3..0  | meaning |
|--------|-----------|-------|------|-------|---------|
| 0      | tag       | dy    | dx   | cores | neuron event |

| bit 23 | 22  | 21..13 | 12..4 | 3..2 | 1..0 | meaning |
|--------|-----|--------|-------|------|------|---------|
| 1      | pol | y      | x     | dy   | dx   | sensor event forwarded to a neighbour |

Displacements use sign-magnitude: bit 3 is the sign (1 = negative, i.e. west or south), and
bits 2..0 are the number of hops left. At every hop, the magnitude of the axis being
travelled is reduced by one (`d4_step` in the package). Sensor events carry 2-bit
displacements that reach one neighbour: `01` = +1, `11` = −1, `00`/`10` = 0.

## Router and chip grid (`top_router`, `grid_link`, `dynapse2_top`)

A round-robin arbiter merges the following sources into one stream:

- the four cores' encoders;
- the four grid links;
- the host input interface;
- the sensor pipeline's mapped and cloned outputs.

The router then decides each word's path:

1. `dx = dy = 0`:
   - neuron event: the word is kept, and its tag is broadcast to every core whose `cores`
     bit is set;
   - sensor event: the word is handed to the sensor pipeline.
2. `cores = 0` on a neuron event: the word is dropped.
3. Otherwise, while `dx ≠ 0` the word goes west (dx < 0) or east (dx > 0), with `|dx|` reduced
   by one. Once dx is zero, it goes south or north by dy in the same way.

The grid-output index order is W = 0, E = 1, S = 2, N = 3. This dimension-ordered rule
never loops.

A word the router cannot hand on holds the arbiter. The testbenches count this case as a
*router stall*.

## A core (`neural_core`)

Each core contains:

- `synapse_cam`: 256 × 64 CAM words. A broadcast gives a one-clock match pulse to each equal
  word.
- `neuron_array`: the 256 neurons with their 64 synapses each, updated once per clock by the
  rules in `dynapse2_pkg` (see below). `synapse_model` and `neuron_model` wrap the same
  rules for a single synapse or neuron, for unit testing.
- `core_encoder`: serves spiking neurons one at a time (round robin) over a four-phase
  `req/ack` per neuron. It reads the neuron's four words from a `sram_1r1w` (1024 × 23) and
  emits them, then raises `ack`. The falling edge of `ack` starts the neuron's refractory
  period, so a neuron cannot fire again before its events have left.
- `param_gen`: 32 bias registers of `{coarse[2:0], fine[7:0]}`. The current they stand for is
  `fine · 8^coarse` units. The analog generator's coarse steps are roughly a factor of 8
  apart (70 pA … 2.25 µA).
- **DE_MUX (quadruple fan-in)**: when enabled, the neurons are seen as a 16 × 16 grid. Each
  2 × 2 block on rows {2k, 2k+1} × columns {2m, 2m+1}, i.e. neurons n, n+1, n+16, n+17,
  sends all its dendritic and shunting current to the soma of its top-left neuron. The core
  then behaves as 64 neurons with 256 synapses each.
- Monitoring: one neuron per core can be selected. Its membrane current, homeostasis
  direction and the delay pulse of its synapse 0 are brought out as ports. On the chip these
  go to analog pads and the spiking ADC.

## Behavioural neuron and synapse

One clock is one time step. A current is an unsigned integer in units of the smallest DAC
step. The model keeps the shape of the circuit behaviour rather than its exact numbers.

**Synapse.** A synapse has 11 latches:

- a 4-bit weight mask selecting among four shared weight currents;
- dendrite select;
- a 2-bit precise and a 1-bit mismatched delay;
- STP enable.

On a match, it waits a delay set by the delay currents, then emits a pulse whose amplitude is
the sum of the selected weights. The pulse width is set by a bias. With STP on, the pulse
amplitude is a resource that falls at each pulse and recovers towards its full value. A
match arriving while the synapse is still delaying or pulsing is lost and counted as a
*synapse drop*.

**Dendrites.** There are four types, each a first-order low-pass filter of its synapses'
pulses:

- AMPA;
- NMDA, which passes only when the membrane current is above its gating threshold;
- GABA_B, which subtracts;
- GABA_A, which shunts the soma.

**Soma.**

- The membrane current integrates (dendritic + DC − adaptation) minus leak and shunt.
- In exponential mode, positive feedback is added above half the threshold.
- On reaching the threshold, the neuron requests the encoder.
- After the acknowledge, the membrane is held at zero for the refractory period.
- A spike-frequency-adaptation current grows at each spike and decays.
- A calcium-like trace drives *homeostasis*. A slow loop nudges an 8-bit gain up or down
  towards a target activity, and the direction of the last nudge is visible as `ho_dir`.

The whole neuron can be killed by a latch.

The following are **not modelled**:

- the AMPA diffusive grid between neighbouring neurons;
- alpha-shaped (double-DPI) synaptic currents;
- conductance-based dendrites;
- transistor mismatch;
- temperature compensation;
- the analog front end and the spiking ADC.

## Sensor pipeline (`sensor_pipeline` and its stages)

Events from a 2D event camera (`{pol, y[8:0], x[8:0]}`) pass through these stages in order:

1. **sensor_interface**: a four-phase parallel handshake.
2. **pixel_filter**: up to 64 CAM entries of `{y, x}` to discard (hot pixels).
3. **event_duplication**: merges events from a neighbouring chip, and can clone each local
   event towards one neighbour.
4. **destination_append**: writes that neighbour's 2-bit displacement into the clone.
5. **sum_pooling**: shifts x and y right by 0..3 each (1:1 to 1:8).
6. **cutting**: keeps a 1×1 … 64×64 window, re-based to its origin.
7. **polarity_filter**: passes ON, OFF or both.
8. **sensor_source_mapping**: a 4096-word table from `{y[5:0], x[5:0]}` to a source word
   `{tag, dy, dx, cores}`.

The result enters the router like a neuron's event. Only a generic sensor bus format is
built; the chip also decodes three specific camera formats that are not described here.

## Configuration (`input_interface`)

The host sends 40-bit words as two 21-bit halves over a four-phase handshake. Bit 20 marks
the most significant half. A low half with no high half before it is counted and dropped.
Bits 39:36 of the word are an opcode:

| op | meaning | fields |
|----|---------|--------|
| 0 | inject an event | `[23:0]` event word |
| 1 | CAM word | core `[35:34]`, neuron `[33:26]`, synapse `[25:20]`, tag `[10:0]` |
| 2 | source word | core, neuron, slot `[25:24]`, word `[22:0]` |
| 3 | synapse latches | core, neuron, synapse, `syn_cfg_t` `[10:0]` |
| 4 | neuron latches | core, neuron, `nrn_cfg_t` `[6:0]` |
| 5 | core settings | core, monitored neuron `[8:1]`, DE_MUX `[0]` |
| 6 | bias | core, index `[20:16]`, coarse `[10:8]`, fine `[7:0]` |
| 7 | sensor register | index `[35:32]`, value `[17:0]` (duplication, pooling, cut origin/size, polarity) |
| 8 | pixel-filter entry | entry `[35:30]`, valid `[18]`, y `[17:9]`, x `[8:0]` |
| 9 | sensor map word | address `[35:24]`, word `[22:0]` |

This opcode map is this design's own. The chip's actual configuration protocol is not
reproduced.

## Departures from the chip

- The chip is asynchronous; this design is one clock domain. Arbitration order, word
  latency and handshake timing are therefore this design's, not the chip's.
- The neurons and synapses are discrete-time behavioural models, not circuit models. Time
  constants are expressed in clocks through the bias currents, with `TIME_K` as the scale.
- The opcode map, the 2-bit sensor displacement code and the sign-magnitude form of `dx`/`dy`
  are choices made here where no encoding was available.
- The sensor bus is one generic format.
- CAM and SRAM contents are not reset; the host must write them. All state that is read
  before being written is reset.

## Simulating

Every testbench is self-checking. Each prints `TB_RESULT checks=<n> failures=<n>` and has a
cycle watchdog. With verilator 5:

    verilator --binary --timing --assert -Wno-fatal -y rtl rtl/dynapse2_pkg.sv \
        tb/tb_neural_core.sv --top-module tb_neural_core -o sim && obj_dir/sim

| testbench | covers |
|-----------|--------|
| `tb_sram_1r1w`, `tb_synapse_cam`, `tb_param_gen` | memories and bias decode |
| `tb_core_encoder` | round-robin grant, four words per spike, handshake timing |
| `tb_synapse_model`, `tb_neuron_model` | delays, STP, dendrites, NMDA gating, refractory, adaptation, exponential mode, homeostasis, drops |
| `tb_neural_core` | a 32-neuron core: CAM → neuron → encoder, DE_MUX, monitor |
| `tb_top_router`, `tb_grid_link`, `tb_input_interface` | routing rule, bus handshakes, split words |
| `tb_sensor_interface` … `tb_sensor_source_mapping`, `tb_sensor_pipeline` | each sensor stage and the chain |
| `tb_dynapse2_top` | four cores of 32 neurons × 8 synapses end to end |
| `tb_dynapse2_full` | the chip at full size: 4 × 256 neurons × 64 synapses |

`tb_dynapse2_top` drives spikes, grid words in all four directions, pass-through, local
delivery, drops, contention, router stalls, every sensor filter, duplication, synapse drops
and the DE_MUX switch. It counts each of these events and fails if any stayed at zero.

`tb_dynapse2_full` runs at the default parameters. It programs neuron 255 of core 3 and
neuron 0 of core 0 and checks their spikes. It also checks the event words that leave on
the east, north and west buses (including a 7-hop north target).
