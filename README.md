# A stochastic-computing CNN datapath with domain-wall weight memory

Stochastic computing (SC) represents a number by the density of ones in a random
bit-stream, so a multiplier is one XNOR gate and an adder is a bit counter. An SC
convolutional network built this way is tiny in logic, but then the weight memory
dominates area and power. This design keeps the weights in **domain-wall memory
(DWM)**. DWM is a non-volatile "racetrack" nanowire that holds many bits in a row and
shifts them past a single read/write port. Two ideas make the memory cheap:

* **Convolution: one nanowire for all filters.** A filter is applied to the whole
  input map, so each filter's weights are read once and shared by every
  inner-product block of its feature map.
* **Fully connected: stochastic weights read sequentially, one shared counter.** A
  neuron with hundreds of inputs does not get hundreds of XNORs and a huge counter.
  It gets 25 lanes. Its weights are spread over 25 nanowires, and the inputs are fed
  to the 25 lanes one group at a time. Each nanowire streams out the weight bits of
  the current group, one bit per clock. This matches how a racetrack is read: in
  order, with no address decoder and no binary-to-stochastic conversion.

The RTL covers the SC datapath and the DWM storage of such a network. It has a
weight-shared convolutional layer, a latency-free max-pooling unit, a Btanh
activation and the resource-shared fully-connected layer. The top level chains one
of each at LeNet-5 sizes. All of it is synthesizable SystemVerilog except the
nanowire itself, which is a behavioural model of a spintronic device.

## Number format

All streams are **bipolar**. A stream whose bits are 1 with probability `p` stands
for `x = 2p - 1` in [-1, 1].

* A weight quantized to `w = 7` bits is stored as the code `c = int((x+1)/2 * 2^7)`.
  That code is the stream density times 128.
* A stochastic weight is the 128-bit stream itself, with about `c` ones in it.
* XNOR of two independent bipolar streams has the bipolar value `a*b`.
* A parallel counter (APC) over `N` product bits gives a count `q` in 0..N. Summed
  over `T` cycles, `(2*sum(q) - N*T) / T` estimates the inner product `sum a_i*b_i`.

## Datapath

```
 x[784] pixel streams
   |
 conv_layer ----------------------------------------------------------------+
 |  conv_weight_store: ONE nanowire, 20 filter blocks x 25 weights x 7 bits  |
 |     serial load / fetch into weight registers                             |
 |  sng x20: LFSR + 25 comparators -> 25 weight streams per filter           |
 |  sc_inner_product x (20 x 24 x 24): 25 XNOR + apc -> count 0..25          |
 +--------------------------------------------------------------------------+
   | counts [20][24][24]
 sc_max_pool x (20 x 12 x 12)   segment counters + comparator + 4:1 MUX
   | selected count
 btanh x 2880                    up/down counter -> activation bit-stream
   | 2880 streams
 fc_layer --------------------------------------------------------------------+
 |  controller: LOAD / RUN / REWIND of all nanowires in lock-step, group count  |
 |  fc_group_mux: 2880 streams -> 25 lanes (group g = inputs 25g .. 25g+24)      |
 |  fc_shared_neuron x 10: 25 nanowires (stochastic weights), 25 XNOR, 25-apc,  |
 |                         accumulator, btanh                                   |
 +------------------------------------------------------------------------------+
   fc_acc[10] (binary scores), fc_y[10] (activation streams)
```

Every block passes one bit, or one small count, per stream per clock. There is one
register stage in the chain, the Btanh counter. Everything before it is
combinational within the cycle.

## The domain-wall nanowire and its sequencers

`dwm_nanowire` models a wire of `LEN` magnetic domains:

* `rd_bit` is the domain under the access port.
* `wr_en` overwrites that domain.
* `shift_en` moves the whole wire one domain: `shift_dir = 0` brings domain `pos+1`
  under the port, `shift_dir = 1` brings `pos-1`.

The stored bits have no reset, because they are non-volatile. Only the position
tracker is reset. Every sequencer leaves a wire parked at domain 0, so "reset" means
"wire parked at its start". An assertion forbids shifting beyond either end.

Each wire has a single port, so every access is serial, one domain per clock. Both
sequencers (`conv_weight_store` and the controller in `fc_layer`) use the same
three moves:

| state  | per cycle                                         | length   |
|--------|---------------------------------------------------|----------|
| LOAD   | write the port domain, then advance (on `wr_valid`) | LEN      |
| FETCH / RUN | read the port domain, then advance             | LEN      |
| REWIND | shift back until domain 0 is under the port       | LEN - 1  |

No shift follows the last domain, so the wire never overshoots.

## Convolution with one shared filter nanowire

`conv_weight_store` keeps all `NF` filters in one wire. Bit `b` (LSB first) of
weight `i` of filter `f` is at domain `(f*M + i)*7 + b`.

* **Load** (`load_start`, then `NF*M*7` bits on `wr_bit`/`wr_valid`) writes the wire.
  The store then rewinds, fetches and rewinds again on its own. The whole sequence
  takes `4*LEN - 2` cycles after the last `load_start` edge when `wr_valid` is
  held high.
* **Fetch** (`fetch_start`) is all a powered-up chip needs, because the wire keeps
  its contents. It reads the wire into a shift chain of weight registers in
  `2*LEN - 1` cycles. `ready` then rises.

Binary storage needs the whole weight at once, which is why the weights go into
registers. This store holds 7-bit codes, as in the paper's weight-sharing drawing.
The paper also prefers stochastic storage in DWM in general (see "Departures").

`conv_layer` gives each filter one `sng`: a 16-bit LFSR and `M` comparators,
`bit_i = (rotl(lfsr, 5i)[6:0] < code_i)`. The `M` weight streams are wired to all
`OH*OW` inner-product blocks of that feature map. Stride is 1 and there is no
padding. Window element `(ch, ky, kx)` is weight `(ch*K + ky)*K + kx`.

## Max pooling without added latency

A straight SC max must see whole streams before it can choose. `sc_max_pool` chooses
ahead instead:

* The four inputs of a 2x2 window each have a segment counter that sums their values
  over `SEG` cycles.
* At the end of a segment, a comparator picks the largest sum. The lowest index wins
  a tie.
* The output MUX passes that input for the whole next segment.
* The first segment uses a random input (`rnd_sel`, from an LFSR in the top), so
  the output starts with the first cycle.

The pooled values are the binary APC counts (0..25), not single bits, because the
pooled value feeds Btanh, which takes a binary input. With `DW = 1` the same module
pools plain bit-streams.

## Btanh activation

`btanh` is a saturating up/down counter with `STATES` states (default `2N`). Each
cycle it adds the bipolar value of the input count, `2q - N`. Its output bit is 1
while the counter is in the upper half of its range. A `start` pulse puts it at
mid-range. The output is registered.

## The resource-shared fully-connected layer

This part is the least obvious. Let `N_IN` be the number of inputs, `LANES` the
number of APC lanes (25) and `WLEN` the length of a stochastic weight (128).
Then `G = ceil(N_IN/LANES)` and `LEN = G*WLEN`.

**Storage layout.** Neuron `n` owns `LANES` nanowires of `LEN` domains. Wire `k`
holds weights `w_k, w_{LANES+k}, w_{2*LANES+k}, ...` in that order, each as `WLEN`
consecutive bits. So domain `g*WLEN + j` of wire `k` is bit `j` of weight
`g*LANES + k`.

**Run schedule.** A run lasts `LEN` cycles. In cycle `t`:

* the group is `g = t / WLEN`, and `fc_group_mux` puts inputs `g*LANES .. g*LANES+LANES-1`
  on the lanes;
* every wire of every neuron presents domain `t`, which is bit `t mod WLEN` of the
  weight belonging to that lane;
* each neuron XNORs the lanes, counts them, adds the count to `acc` and steps its
  Btanh;
* all wires advance one domain.

Input and weight streams therefore stay aligned without any addressing. Each input
stream is looked at only during the `WLEN` cycles of its group. This subsampling
is the precision the scheme gives up: its estimate of a neuron's pre-activation is
`(2*acc - LANES*LEN) / WLEN`. The paper argues that fully-connected layers tolerate
this well.

**Controller.** One controller drives the shift, read and write commands of all
`N_OUT*LANES` wires in lock-step. The group MUX is shared too. The states are:

* `load_start` -> LOAD. Each cycle with `wr_valid`, `wr_bits[n][k]` goes into wire
  `k` of neuron `n`. After `LEN` cycles the layer goes to REWIND (`LEN-1` cycles).
* `run_start` -> RUN. Clears the accumulators and Btanh counters, then runs for `LEN`
  cycles. `done` pulses in the cycle after the last RUN cycle, when `acc` is final.
  The layer then goes to REWIND (`LEN-1` cycles).

If `N_IN` is not a multiple of `LANES`, the padding lanes of the last group read
input 0. Their weights must be loaded as a bipolar zero, for example alternating
bits, so that they add no bias.

## Inference sequence at the top (`dw_cnn`)

1. Load the weights. `conv_load_start` plus 3500 bits, and `fc_load_start` plus
   `LEN` cycles of `fc_wr_bits`, may run at the same time. After a later reset only
   `conv_fetch_start` is needed. The FC weights are read in place and need nothing.
2. Raise `run_start` once `conv_ready` is high and both stores are idle. Pools,
   activations and accumulators restart. For `LEN` cycles (`running = 1`) drive one
   new bit per pixel stream on `x`.
3. `done` pulses. `fc_acc[n]` holds neuron `n`'s score. `fc_y[n]` was its activation
   stream during the run.

At the default size, `N_FC = 20*12*12 = 2880` inputs, `G = 116` groups and
`LEN = 14848` cycles per inference. `ev_pool_switch` and `ev_act_sat` are
per-cycle status flags for debugging.

## Parameters

| module | parameter | default | origin |
|---|---|---|---|
| all | weight precision | 7 bits | paper (chosen from its precision sweep) |
| fc_* | `WLEN` | 128 | paper (`2^7`-bit stochastic weights) |
| fc_* | `LANES` | 25 | paper (25 nanowires, 25-input APC) |
| fc_layer | `N_IN`, `N_OUT` | 800, 500 | paper's LeNet-5 example layer |
| conv_* / dw_cnn | image, kernel, maps | 28, 5, 20 | LeNet-5 first layer (784 -> 11520 -> 2880) |
| sc_max_pool | `SEG` | 16 | assumed |
| btanh | `STATES` | 2N | assumed |
| dwm_nanowire | `LEN` | 4096 | one FC wire of the 800-input layer (32 weights x 128) |

## Departures from the paper and assumptions

* **Network depth.** The paper evaluates LeNet-5 (784-11520-2880-3200-800-500-10).
  The top chains the first conv/pool stage straight into a shared FC layer of
  2880 -> 10. The second conv stage and the 800 -> 500 layer are the same modules
  with other parameters (`conv_layer` takes `IN_CH`, and `fc_layer` defaults to
  800 -> 500), but they are not instantiated. The top is a working slice of the
  network, not the whole of LeNet-5.
* **Conv weights are binary codes plus SNG**, as in the paper's weight-sharing
  drawing. The paper's storage comparison favours stochastic storage in DWM, and
  that is used for the FC layer.
* **The APC is exact.** The paper names an *approximate* parallel counter but does
  not describe its approximation.
* **Weight length.** The paper also says 256-bit weights are enough for all FC
  layers. The default stays at 128 bits, the length it uses in its storage
  comparison. `WLEN` is a parameter.
* **Not in the paper's text; this design's choices:** the FC run schedule (each
  group for `WLEN` consecutive cycles), the padding rule, the rewind step, all
  handshakes, the LFSRs and their seeds, pooling segment length, tie rule and
  random source, the Btanh state count and start state, weight bit order on the
  wires, and the FC accumulator output.
* **Not modelled:** device physics, shift currents, read/write energy and timing
  of the nanowire, and the offline mapping of real weights to 7-bit codes. The
  testbenches apply that mapping themselves.

## Verification

Each module has a self-checking testbench in `tb/`. It compares the module against
a reference written independently in the bench: a separate LFSR, comparator,
counter, pooling or Btanh model. The benches print
`TB_RESULT checks=N failures=F`. Main points covered:

* nanowire: write/read in both directions, and data kept across reset;
* SNG: bit-exact output, and stream densities within 0.03 of `code/128`;
* conv layer: every output count of every map, cycle by cycle;
* conv weight store: load+fetch in `4*LEN-2` cycles and fetch-only in `2*LEN-1`;
* pooling: segment selection, including a changing maximum;
* Btanh: cycle exactness, saturation, and the three operating regions;
* FC neuron and layer: per-cycle counts, group sequence, accumulators, Btanh
  streams, run latency `LEN` and rewind `LEN-1`, and back-to-back and post-reset
  runs without reload.

The whole top is checked end to end by two benches with the same body.
`tb_dw_cnn` runs it reduced (12x12 image, 2 filters, 3 outputs, 32-bit FC weight
streams), so it builds and runs in seconds. `tb_dw_cnn_full` runs it with every
parameter at its default (28x28 image, 20 filters, 10 outputs, 128-bit streams,
FC run of 14848 cycles). Each loads both stores, runs one image, resets,
restores the conv weights by fetch only and runs a second image. Each checks
sampled conv counts, one pooling window and its activation, and every FC
accumulator against a model fed from the FC inputs. Each also counts every
mechanism: load, fetch-only restore, rewind, pool switch, activation saturation,
group switch, padded last group, and a run on retained weights. A mechanism
that never happened counts as a failure. The scores they print come from
synthetic images and random weights, not from a trained network. No accuracy
claim is made.

Simulate with Verilator, for example:

```
verilator --binary --timing --assert -Irtl --top-module tb_fc_layer \
    rtl/dwcnn_pkg.sv tb/tb_fc_layer.sv
./obj_dir/Vtb_fc_layer
```

The other modules are found through `-Irtl`. The full-size `tb_dw_cnn_full` builds a
model with 11520 inner-product blocks, so expect a long C++ compile (about ten minutes
on one thread). Add `-j 0` to compile in parallel. The simulation then takes
about half a minute.
