# NSAT tile: a neural and synaptic array transceiver in SystemVerilog

NSAT runs spiking neural networks in discrete time steps, using only
integer adds and shifts. In every step each neuron adds up the weights of
the spikes it received, updates its state components, fires when
component 0 crosses its threshold, and passes its spikes on through a
routing table. The weights can learn from the spike timing through an
event-driven STDP rule. Learning can also depend on the neuron state,
using a modulation component.

This design is one NSAT tile. The top is `nsat_tile`. It holds four NSAT
cores and a five-port packet router. It also has an AER port that talks
to a host over a 32-bit synchronous FIFO bus. The host supplies the time
step: it pulses `start_tstep`, and each core pulses its `done_tstep` bit
when its step is finished.

The sizes are the paper's:
- 4096 state slots per core, arranged as 512 rows of 8 components.
- A neuron uses 1, 2, 4 or 8 of these components.
- 16-bit states.
- 8-bit weights.
- 65,536 words of synaptic memory per core (128 KB).
- Axonal delays of up to 15 steps.

## Packet format

Every transfer is one 33-bit packet (`aer_pkt_t`):

| bits | field | meaning |
|---|---|---|
| 32 | Valid | strobe; not sent over the 32-bit bus |
| 31 | Wr | memory write |
| 30 | Rd | memory read; a read response has Rd and Init set |
| 29 | Spike | spike event |
| 28 | Init | a write or read sets the memory select and address |
| 27:26 | reserved | |
| 25:20 | CoreID | [5:2] is the tile, [1:0] is the core in the tile |
| 19:16 | Delay | axonal delay of a spike, or the memory select |
| 15:0 | NeuronID | destination axon, address, or data word |

Spike packets carry the destination axon and its delay.

Configuration uses three kinds of packet:
- **Init write:** loads the memory select from Delay and the address from NeuronID.
- **Plain write:** writes NeuronID as a 16-bit data word, then increments the address.
- **Read:** returns `{Rd, Init, CoreID, select, data}`. The host can read any configuration word back.

## Configuration map

| select | memory | address | word |
|---|---|---|---|
| 0 | weight data | word index | `{skip[7:0], weight[7:0]}` |
| 1 | pointer array | axon*4 + k | k=0 first word, 1 word count, 2 base slot |
| 2 | neuron state | slot | state value |
| 3 | neuron group | neuron | parameter group (0..7) |
| 4 | neuron parameters | group<<7, component<<4, index | bias, reset value, spike increment, low/high clip, threshold, noise shift, weight gain, blank-out probability, refractory period, flags, modulation component |
| 5 | A matrix | {group, row, column} | `{sign, shift}` of one coupling |
| 6 | learning parameters | group<<8, component<<5, index | flags, causal/acausal breakpoints, heights, signs, slopes |
| 7 | routing table | neuron*2 + k | word 0: enable, route back, delay, core; word 1: axon |
| 8 | global registers | 0..3 | neuron size, learning enable, STDP window, rounding bits |

The core accepts configuration writes only when it is idle. A write that
arrives while a step is running waits in the input FIFO.

## Tile, router and AER port

Each input of `nsat_router` has a small FIFO. Each output has round-robin
arbitration, so every output can move one packet per cycle.

Packets are routed as follows:
- A read response goes to port 0, which is the AER port.
- A packet whose tile field matches `TILE_ID` goes to its core (ports 1–4).
- Any other packet goes to port 0.
- A packet for a foreign tile that arrives from port 0 is dropped and counted. There is no multi-tile fabric to send it to.

`nsat_aer_if` turns the packets into words on the FIFO bus:
- Receive: it reads while `rxf_n` is low and it has room.
- Transmit: it writes while `txe_n` is low.
- The Valid bit is the bus strobe.

## Core time step

`nsat_core_ctrl` runs these phases after `start_tstep`:

1. **Tick:** swap the two accumulation banks, advance the STDP counters and move the delay array to the next slot.
2. **Causal learning:** walk the fanout of every axon whose pre-synaptic STDP counter has just expired. The walk applies only the causal part of the rule.
3. **Neuron evaluation:** one pass over all 512 rows, taking ROWS + 4 cycles.
4. **Spike walks:** walk the fanout of every spike due this step, which also runs the acausal learning. This phase lasts until the delay array slot is empty and the axon module has routed every spike.
5. **Done:** pulse `done_tstep`.

Spikes that arrive between steps are walked while the core is idle, and
their weights count for the next step. A spike injected before step t
with delay d reaches the neurons in the evaluation of step t+d.

## Synaptic weight memory and compression

`nsat_synmem` turns an axon number into a stream of (destination slot,
weight) pairs at one pair per cycle.

The pointer entry of an axon gives three values:
- the first weight word;
- the number of words;
- the base destination slot.

Several axons may share one pointer target.

Each weight word holds a weight and a skip count, which is the number of
slots without a connection before this one. This is the run-length
encoding: missing connections take no space. The destination therefore
advances by skip+1 from one word to the next.

Learned weights are written back to the same word in the walk cycle.

## Weight accumulation

`nsat_weight_accum` keeps two banks of 4096 16-bit saturating sums:
- The active bank collects the weights of this step's walks.
- The other bank holds the previous step's sums. The neuron evaluation reads it one row of eight at a time and clears it on read.

Blank-out drops a synaptic event before it is added. An event is dropped
when the top byte of the core RNG is below the destination neuron's
probability parameter. Blank-out does not affect learning.

## Neuron evaluation

`nsat_neuron_eval` holds the state memory, each neuron's parameter group
and eight parameter groups. It runs a four-stage pipeline:

1. Read the state row, the accumulated input and the parameters.
2. Integrate: x + Σ A⋄x + bias + noise.
3. Add the input, scaled by the weight gain, then clip to the low and high bounds.
4. Spike and reset, then write the row back.

The eight `nsat_neuron_lane` instances compute one row in parallel. A
neuron of 2^log2k components occupies that many lanes of a row.

The threshold test uses component 0. Further features:
- **Refractory counter:** clamps the state for a set number of steps after a spike.
- **Adaptive threshold flag:** compares component 0 with component 1.
- **Spike increment:** each component can get an increment on a spike instead of the reset value.

The A-matrix and noise terms use the paper's shift operator. A
coefficient is a sign and a shift exponent, so a product is a shift.

## Learning engine

`nsat_learning_engine` keeps two sets of 8-bit saturating counters:
- one pre-synaptic counter per axon;
- one post-synaptic counter per neuron.

Both are cleared on a spike and step up at every tick. A pre-synaptic
counter that reaches the STDP window `tstdp` raises an expiry, which
starts the causal walk. A spike walk applies the acausal part of the rule
from the post-synaptic counters.

The kernel has three segments per direction. Each segment has a
breakpoint, a height (shift), a sign and a slope, set per group and
component. A segment contributes ±(x_m ⋄ h), where x_m is the post
neuron's modulation component. This is the third factor of the rule.
Extra modes:
- **Exponential mode:** the height's exponent falls by one every 2^slope steps into the segment.
- **State-dependent mode (STDP off):** every pre-synaptic spike applies ±(x_m ⋄ h) of the first acausal segment. Only the acausal path is used.

The weight change goes through randomized rounding: its low `rr_bits`
bits are treated as a probability against a random number. The new
weight is then clipped to [-128, 127]. Only synapses whose destination
group is marked plastic learn.

## Axon module and delay array

`nsat_axon` first stores the spikes of the evaluation in a bitmap, so the
pipeline never stalls. It then drains the bitmap one neuron per cycle.
Each neuron's routing table entry selects one of three outcomes:
- **Route back:** the spike goes into the delay array of the same core.
- **Route out:** the spike becomes a packet.
- **Drop:** the neuron has no enabled entry.

`nsat_spike_store` is the delay array: 16 steps × 4096 axons of bits. It
also acts as the input queue of the weight look-up, so it cannot
overflow. Two spikes to one axon in the same step merge into one.

## Random numbers

Each lane and the core have an `nsat_rng`. It combines a 43-bit LFSR and
a 37-bit cellular automaton register:
- Uniform samples come from four generators.
- Their sum, centred and shifted, gives an approximately normal sample for the membrane noise.
- The core's own RNG drives blank-out and randomized rounding.

## Always-on interface and clock gating

`nsat_aon_if` runs on the ungated clock. It holds the de-packetizer
(`nsat_depacketizer`), the packetizer (`nsat_packetizer`) and the clock
gate. The core clock runs only when one of these holds:
- a packet is waiting;
- a step was requested;
- the core is busy.

`nsat_clock_gate` is a behavioural latch + AND cell. `test_en` forces the
clock on.

**Reset caveat:** because the core clock is gated, the core's
asynchronous reset has to be released before the clock is needed. The
testbenches drive a falling edge on `rst_n` at time 1.

## Simulation

Each block has a self-checking testbench `tb/tb_<module>.sv`. Each one
ends with a line `TB_RESULT checks=N failures=M`.

`tb_nsat_tile` runs the full-size tile at default parameters. It acts as
the host through a bridge model with random back-pressure. It programs
the four cores and then runs 20 time steps. It counts and checks each
mechanism:
- mode switch;
- register read-back;
- route back and route out;
- axonal delay;
- causal-only walk;
- weight updates;
- blank-out with some events kept and some dropped;
- clock gating on every core;
- transmit back-pressure;
- foreign-packet drop;
- step length.

Example with Verilator 5:

    verilator --binary --timing -Wno-fatal -Irtl rtl/nsat_pkg.sv rtl/*.sv tb/tb_nsat_tile.sv --top-module tb_nsat_tile
    ./obj_dir/Vtb_nsat_tile

## Workloads

These sizes come from the paper's experiments. Per-core capacity is
4096 slots and 65,536 weight words.

| Workload | Fits? | Arithmetic |
|---|---|---|
| Multicompartment neuron | yes | 1 neuron with 4 components, one row |
| Neural field | yes | 100 + 100 neurons with 10,100 synapses, in one core |
| eRBP MNIST 784-100-10 | yes, across two cores | about 81,400 weights. The input-to-hidden part alone (78,400) exceeds one core, so the hidden layer is split between two cores. |
| eRBM 18 × 100 | yes | 3,600 weights |
| Spike-train learning 100 → 5 | yes | 500 plastic weights |

The eRBP error-feedback count is my own estimate. All other sizes come
from the paper.

## Differences from the paper

- **A-matrix operator:** in the shift operator's A-matrix case, the printed rule ends with "return a". It is read here as a typo for the shifted value.
- **Row width:** the 8 lanes evaluate one 8-component row per cycle. A pass takes ROWS + 4 cycles. The paper gives the 4-stage pipeline but not the exact rate.
- **Parameter groups:** neuron and learning parameters are shared by 8 groups, and each neuron picks its group. The paper does not fix the number of groups.
- **STDP kernel:** each direction uses three segments, each with a breakpoint, height, sign and slope. The exponential form is this design's own reading of the exponential mode. Fig. 12c gives the shape.
- **STDP window and counters:** one STDP window serves the whole core, and the counters are 8 bits (up to 255 steps).
- **STDP counter storage:** the counters are flip-flops, not a latch array.
- **Weight word format:** the `{skip, weight}` word layout and the pointer layout are this design's.
- **Router:** packets for other tiles leave through the AER port. Foreign packets that arrive from the AER port are dropped.
- **FIFO bus:** the FT601 handshake is simplified to a ready/valid pair per direction, with Valid as the strobe.
- **Not built:** the host PC, the FT601 bridge chip and the multi-tile AER fabric. Their signals are plain ports of the tile.
- **Synthesis:** full-size synthesis is not attempted. The memories are large arrays with no SRAM macros, so synthesis of the whole tile takes very long. Per-block synthesis at default parameters is the reference.
