# OpenSpike accelerator core — SystemVerilog model

OpenSpike runs a small dense spiking neural network (SNN) on a fixed pool of
1024 hardware neurons. It reuses that pool for every layer, one layer at a time.
The reference network is 1024 input neurons, 1024 hidden neurons and 10 output
neurons, fully connected, with 1,059,840 one-bit weights (+1 or −1). Reusing the
neurons keeps the area small. The price is that neuron state must be saved and
reloaded for each layer. The core hides that cost by overlapping it with the
weight reads: while the multiply-accumulate (MAC) units sum up one layer, the
rest of the datapath finishes the layer before it. Every neuron has a Schmitt
trigger: a spike raises an inhibition flag, and the neuron cannot spike again
until its potential has fallen below a second, lower threshold.

This RTL describes the core: its control unit, the 1024 neurons, the selectors,
the spike processor, the membrane potential arithmetic unit (MAU), the memory
controller and the SRAM banks. It does not cover the management CPU, bus, DMA
engine or physical SRAM macros that surround the core on the chip. A plain host
memory port stands in for them.

## Neuron model as implemented

Every neuron keeps an 8-bit two's-complement membrane potential `u`, a 4-bit
decay code `β` and an inhibition bit `i`. Within time step `t`, a neuron with
input current `I` (the sum of +1/−1 over the synapses whose input spiked)
updates as follows:

```
u'      = sat8( I + β·u )                 β·u by shift-and-add, see below
z       = (u' > uthr_h) and not i         spike
i_new   = z or not (u' < uthr_l)          inhibition
u_store = z ? sat8(u' − uthr_h) : u'      reset by subtraction
```

* **Previous-step inputs.** The hidden and output layers integrate the spikes
  their input layer produced in the *previous* time step (`x_{t−1}` in the LIF
  equation). This delay is what lets the layers overlap in hardware. A spike
  pattern presented at step 0 therefore reaches the hidden layer at step 1 and
  the output layer at step 2. In the first step of a run, the previous spikes
  count as zero.
* **Decay.** `β` is a code counted in eighths: code k gives β = k/8 for k = 0…8,
  and codes 9…15 give 1. The product uses no multiplier. The potential is
  shifted right by 1, 2 and 3 bits (arithmetic shifts, rounding towards −∞),
  giving u/2, u/4 and u/8. Then u/2 + u/4 forms 3u/4. A first multiplexer picks
  u/4, u/2 or 3u/4, and a second adder adds u/8 to give 3/8, 5/8 or 7/8. A last
  multiplexer picks among 0, that sum, u/8, u/4, u/2, 3u/4 and u. Because every
  term is truncated, 7u/8 is `⌊u/2⌋+⌊u/4⌋+⌊u/8⌋`, not `⌊7u/8⌋`.
* **Inhibition.** The inhibition rule is kept exactly as the equations give it.
  The bit clears only when the neuron did not spike *and* `u' < uthr_l`. It is
  set otherwise, including when the potential merely sits at or above `uthr_l`.
  If `uthr_l < uthr_h`, a neuron climbing slowly from below `uthr_l` gets
  inhibited before it reaches `uthr_h`. It can then fire only when it jumps
  over the whole band in one step. If `uthr_l ≥ uthr_h`, the bit acts as a
  refractory flag: after a spike the neuron stays silent until its potential
  drops below `uthr_l`. Pick the thresholds with this in mind. The testbenches
  use `uthr_h = 1` and `uthr_l = 3`.
* **Reset.** By default (`RESET_SUB = 1`) the high threshold is subtracted from
  a neuron that spiked, with saturation. With `RESET_SUB = 0` the potential is
  set to zero instead.
* **Input layer.** Each input neuron has one synapse: its pixel spike from the
  input frame, weighted by its own input weight.
* **Thresholds.** `uthr_h` and `uthr_l` are global to the core and are set
  through ports.

## One time step, cycle by cycle

This section is the heart of the design. The datapath has three pipelines, and
each one reads SRAM in one cycle and uses the data in the next:

* **MAC pipeline.** Each cycle it reads one weight row and one row of stored
  spikes. All 1024 MACs add four synapses per cycle.
* **Selector pipeline.** Each cycle it reads the potential, decay and
  inhibition rows of 16 neurons, and one cycle later writes back their new
  potential, inhibition bit and spike.
* **Cache pipeline.** It reads one eighth of the next input frame into the
  128-byte input spike cache.

Each neuron has two registers. The MAC accumulator sums the current layer's
synapses. The potential adder's hold register keeps the previous layer's sum.
At the first cycle of each state, a `transfer` copies every accumulator into
its hold register. The MACs can then start the next layer while the selector
pipeline finishes the held one, 16 neurons per cycle.

| State | Cycles (defaults) | MAC pipeline | Selector pipeline | Cache |
|---|---|---|---|---|
| `ST_IN` | 3 | cycle 0: transfer output-layer sums; read input weights. cycle 1: every neuron adds its one input synapse | cycles 1–2: finish the output layer of the previous step (10 neurons, one group; skipped at step 0) | – |
| `ST_HID` | 257 | transfer input-layer sums; 256 chunks × 4 synapses of the hidden layer, reading input-layer spikes of step t−1 | 64 groups of 16: finish the input layer of step t | – |
| `ST_OUT` | 257 | transfer hidden-layer sums; 256 chunks for the 10 output MACs, reading hidden-layer spikes of step t−1 | 64 groups: finish the hidden layer of step t | 8 beats: frame t+1 |

Before the first step, `ST_PRELOAD` (9 cycles) fills the cache with frame 0.
After the last step, `ST_FLUSH` (3 cycles) finishes the last output layer. A run
of S steps therefore takes 1 + 9 + 517·S + 3 cycles from the `start` edge to
`done`.

For comparison, the paper reports 0.120 µs, 10.3 µs and 10.3 µs for the three
states, 20.72 µs in total. Its own cycle counts (3 and 256) imply a cycle of
about 40 ns, which puts each dense layer at roughly 257.5 cycles. That matches
the 257 cycles here.

Spikes are double-buffered by time-step parity. Step t writes its spikes to
parity `t mod 2`, and the MACs read parity `(t−1) mod 2`, so the write-back of
a layer never overwrites spikes that the next layer has yet to read. The
output layer is finished one step late, so its spikes use the parity of t−1.

## Memory banks and how to program them

All banks are dual-port (one write port, one synchronous read port) with one
cycle of read latency. The host reaches them only while `busy` is low. Host
requests made while the core is busy are dropped.

| `host_mem` | Bank | Row width × rows | Size | Content of a row |
|---|---|---|---|---|
| `MEM_WGT_HID` (0) | hidden weights | 4096 × 256 | 128 KB | row c: bit `4j+k` = weight from input `4c+k` to hidden neuron j |
| `MEM_WGT_OUT` (1) | output weights | 64 × 256 | 2 KB | row c: bit `4o+k` = weight from hidden `4c+k` to output o (bits 40–63 unused) |
| `MEM_WGT_IN` (2) | input weights | 1024 × 1 | 128 B | bit i = weight of input neuron i |
| `MEM_INPUT` (3) | input frames | 128 × 1024 | 16 KB | row `8t+b`: pixels `128b … 128b+127` of frame t |
| `MEM_POT` (4) | membrane potentials | 128 × 256 | 4 KB | 16 potentials, byte j = neuron `16g+j` |
| `MEM_DECAY` (5) | decay codes | 64 × 256 | 2 KB | 16 codes, nibble j = neuron `16g+j` |
| `MEM_SPIKE` (6) | spikes | 16 × 512 | 1 KB | row `256p + r`: 16 spikes, parity p |
| `MEM_INH` (7) | inhibition bits | 16 × 256 | 512 B | 16 bits |

A weight bit of 1 means +1; a weight bit of 0 means −1. In the four per-neuron
banks (potentials, decay codes, spikes, inhibition), row `r` belongs to the
input layer for r = 0…63 (g = r), to the hidden layer for r = 64…127, and to
the output layer for r = 128.

`host_addr` counts 32-bit words within a bank. Word a is lane `a mod L` of row
`a div L`, where L = row width / 32. Lane 0 holds the least significant bits.
The 16-bit spike and inhibition banks take one row per address, from the low
half of the word. A read returns `host_rvalid` and `host_rdata` on the
following cycle.

The host sequence is:

1. Write the weights, the decay codes and the input frames.
2. Set `uthr_h` and `uthr_l`.
3. Pulse `start` with `num_steps` (1…128). With `init_state = 1`, each layer
   starts from zero potentials and cleared inhibition, so the potential and
   inhibition banks need no clearing between images. With `init_state = 0`,
   the run continues from the stored state.
4. Collect the output: `out_valid` pulses once per step, with `out_spikes` (10
   bits) and `out_step`. The vector for the last step arrives in the same cycle
   as `done`.

## Files

All files are in `rtl/`, with one module or package per file.

| File | Role |
|---|---|
| `snn_pkg.sv` | widths, `layer_e`, `state_e`, `mem_e`, saturation helper |
| `openspike.sv` | top: wires everything below, 1024 × (`mac_unit` + `potential_adder`) |
| `control_unit.sv` | state machine and the three pipelines' indices |
| `memory_controller.sv` | bank addressing, spike chunk selection, first-visit zeroing, host port |
| `sram_dp.sv` | generic dual-port bank with lane write mask |
| `mac_unit.sv` | binary-weight MAC, 4 synapses per cycle |
| `potential_adder.sv` | hold register plus saturating adder |
| `neuron_input_selector.sv` | routes spikes and weights to the MACs for each layer |
| `neuron_selector.sv` | picks 16 neurons, routes decayed potentials in and sums out |
| `spike_processor.sv` | input spike cache plus 16 `schmitt_trigger`s |
| `schmitt_trigger.sv` | spike and inhibition logic |
| `mau.sv` | 16 × `potential_decay` plus potential reset |
| `potential_decay.sv` | shift-and-add multiplication by β |

## What follows the source and what does not

**Taken from the published description:**

* Neuron count (1024), fan-in per cycle (4) and selector width (16).
* The 3-state control unit and its cycle budget.
* Binary weights.
* The Schmitt-trigger equations and gates.
* The shift-and-add decay and its selectable fractions.
* Reset before save.
* Bank sizes: 130 KB of weights, 4 KB of potentials, 2 KB of decay codes, 2 KB
  for spikes and inhibition, 16 KB of input frames.
* The 128-byte input cache loaded in 8 cycles.

**Chosen here, where the description is silent:**

* All widths except the 8-bit potential.
* The β code table.
* Saturation and rounding.
* The parity double-buffering of spikes.
* The PRELOAD and FLUSH states.
* The `init_state` option.
* Global thresholds set from ports.
* The host port and the bank word layouts.
* The start/done handshake.

**Departures worth knowing:**

* **Clocking.** The chip runs its SRAMs at twice the core clock, with two SRAM
  cycles per access. This model uses a single clock with one access per core
  cycle, which gives the same throughput per core cycle.
* **Bank organisation.** The chip builds its banks from 2 KB macros and
  multiplexes several weight read lines per core cycle. Here each bank is one
  wide array, for example one 4096-bit row per cycle for the hidden weights.
* **Reset rule.** The description states both "subtract the threshold" (in the
  equation) and "reset the potential" (in the text). Subtraction is the
  default; `RESET_SUB = 0` selects reset to zero.
* **Host access.** The host port reaches every bank, including the membrane
  potentials. The published block diagram shows the external data path
  reaching only the weight, spike/inhibition, decay-rate and input banks.
* **Timing closure.** The chip's critical path is the decay step, whose
  throughput it doubles with a pair of adders to reach about 24 MHz. Here each
  of the 16 decay lanes is a shift-and-add circuit with two adders and finishes
  in one core cycle. No clock rate is claimed for this RTL; nothing here was
  taken through place and route.
* **Network shapes.** Only the dense 1024-N-10 shape is sequenced. The
  convolutional networks used for the accuracy figures (MNIST, FashionMNIST,
  DVSGesture) do not fit: their first layers need about 9216 neurons or more,
  and the control unit has no convolution schedule.

## Simulating

Every testbench in `tb/` checks itself. Each prints `TB_RESULT checks=N
failures=M` and stops; it also has a watchdog. To build one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl +libext+.sv \
    rtl/snn_pkg.sv tb/tb_openspike.sv --top-module tb_openspike -Mdir obj -o sim
./obj/sim
```

* `tb_openspike` is the end-to-end test at N = 256. It builds in about 20 s
  and runs in well under a second.
* `tb_openspike_full` is the same test at the default size: 1024 neurons and
  1,059,840 weights, runs of 6 and 4 steps. It builds in about 70 s and runs in
  a few seconds.

Both testbenches share `tb/openspike_tb_body.svh`. It does the following:

1. Programs a random network through the host port.
2. Runs it twice: once from zero state, once continuing from the stored state.
3. Compares every output spike vector with a behavioural model of the
   equations above.
4. Reads back and compares every stored potential and inhibition bit.
5. Checks the run length in cycles.
6. Counts how often each mechanism occurred. It fails if any never did. The
   mechanisms are spikes in each layer, spikes blocked by inhibition,
   inhibition released, saturation, cache loads, a host write dropped while
   busy, and a run continuing stored state.

The block testbenches are `tb_mac_unit`, `tb_potential_adder`,
`tb_schmitt_trigger`, `tb_potential_decay`, `tb_mau`, `tb_neuron_selector`,
`tb_neuron_input_selector`, `tb_spike_processor`, `tb_sram_dp`,
`tb_control_unit` and `tb_memory_controller`. They compare their block against
independently written models: exhaustive for the decay and the Schmitt
trigger, random elsewhere. The control unit test checks the length of every
state and the issue counts.

To change the size, override `N`, `N_OUT` and `T_MAX` on `openspike`. N must
be a multiple of 256, so that every bank row divides into 32-bit host words.
`FANIN`, `SEL` and `BEATS` are parameters too, but only their defaults (4, 16
and 8) have been simulated.
