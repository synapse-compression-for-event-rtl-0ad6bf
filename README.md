# Axon-based synapse compression for an event-driven CNN core

In an event-based neural-network processor, each neuron that fires must find all the
neurons it connects to. The simple way is a lookup table per source neuron that lists
every target and its weight. For a convolutional network that table grows with the
number of neurons times the fan-out, and it is by far the largest thing in memory. A
mid-sized CNN then needs many megabytes of connectivity on top of its weights.

The idea behind this design is that a convolution repeats one connectivity pattern at
every position of a feature map. The pattern does not have to be stored once per neuron.
A whole population of neurons (a feature map, or a fragment of one) shares a few small
descriptors:

* At the **source**, each population stores a short list of **axons**. An axon is a
  64-bit instruction that says where the population's fan-out lands in one destination
  population. When a neuron fires, the *synapse computation unit* (SCU) runs each axon
  once. For each hit it emits one event: the top-left corner of the neuron's projection
  into the destination, plus the source channel and the firing value.
* At the **destination**, the *pattern/synapse lookup* (PSL) unrolls that event. It uses
  the kernel descriptor of the destination population and the source channel, walks the
  kernel window and produces one weighted synapse per affected neuron. The *neuron
  update* unit then applies each synapse to the neuron state in memory.

Connectivity memory therefore grows with the number of populations and layers, not with
the number of neurons. One event crosses the network per (firing neuron, destination
fragment) pair instead of one per synapse. Padding, stride, upsampling, cutting maps into
fragments, pooling, dense layers and depthwise/grouped convolutions all map onto the same
two small units, with a few offsets worked out ahead of time.

This repository holds synthesizable SystemVerilog for one neuron core of such a
processor:

* the SCU;
* the event queue;
* the PSL;
* the neuron-update unit;
* the unified 256 kB core memory and its arbiter;
* the core top that wires them together.

It also holds a self-checking testbench for each unit and an end-to-end testbench of the
core at full size.

## 1. Convolution seen from the firing neuron

A normal convolution is written from the output's side. Output `(c, x, y)` sums
`W[c, i, j, k] * P[i, x + j - XP, y + k - YP]` over the input channels `i` and the kernel
positions `j, k`. Here `XP` and `YP` are the zero columns and rows padded on the left and
top.

An event-driven core needs the reverse view: when input neuron `(i, xs, ys)` fires, which
outputs change? Solving `xs = x + j - XP` for `x` gives:

```
x = xs + XP - j,   j = 0 .. KW-1     ->  x in [xs + XP - KW + 1, xs + XP]
```

The fan-out is therefore a `KW x KH` window with its top-left corner at
`(xs - KW + XP + 1, ys - KH + YP + 1)`. The weights in that window are the kernel
mirrored in X and in Y ("XY-transposed"): window column `dx` uses kernel column
`KW - 1 - dx`.

Worked example in 1-D:

* `KW = 3`, `XP = 1`, a map 8 wide.
* Source neuron `xs = 0` fires. The corner is at `0 - 3 + 1 + 1 = -1`. The window covers
  `x = -1, 0, 1`. Column `-1` is off the map, so only outputs 0 and 1 are updated, with
  kernel taps 1 and 0.
* Source neuron `xs = 7` fires. The corner is at 6. The window covers `x = 6, 7, 8`.
  Column 8 is off the map.

The corner is the only per-event quantity: everything else is fixed per layer. The SCU
computes the corner by adding one signed constant per axis to the neuron's coordinates:

```
X_off = -KW + XP + 1          (Y likewise)
```

The following sections add more terms to this offset, but it always stays one
precomputed constant.

## 2. Memory and data structures

Each core has one single-port memory of 32768 words of 64 bits (256 kB, 15-bit word
address). It holds descriptors, axons, weights and neuron states together, and the mapper
may divide it between them in any way. Three kinds of descriptor word exist. The fields
are listed from the most significant bit down (the packed structs in `rtl/scp_pkg.sv`).

**Population descriptor.** One per population, at word `ID_p`. Words 0 to 31 are the
population table.

| field | bits | meaning |
|---|---|---|
| `kd_base` | 63:49 | address of the kernel descriptor for source channel 0; `+ c_src` selects the others |
| `start` | 48:34 | first word of the population's block: `axon_cnt` axons, then the neuron states |
| `axon_cnt` | 33:30 | number of axons (0..15) |
| `act` | 29:28 | activation-function code (stored, not interpreted inside the core) |
| `ntype` | 27:26 | 0 = accumulate, 1 = max, 2 = half-precision accumulate |
| `d` | 25:16 | depth D (channels) |
| `h` | 15:8 | height, stored as the true height `<< SL` |
| `w` | 7:0 | width, stored as the true width `<< SL` |

**Axon.** One per (source population, destination fragment). It is stored in the source
core.

| field | bits | meaning |
|---|---|---|
| `idp` | 63:59 | destination population ID in the destination core |
| `ad` | 58:51 | relative destination core `{dx[3:0], dy[3:0]}`; 0 is this core |
| `us` | 50:48 | log2 of the upsampling applied to the source |
| `kh_m1`, `kw_m1` | 47:40 | kernel height − 1, kernel width − 1 |
| `hq`, `wq` | 39:28 | destination height and width in units of 8, for hit detection |
| `c_off` | 27:18 | channel offset of the destination fragment |
| `y_off`, `x_off` | 17:0 | signed 9-bit anchor offsets |

**Kernel descriptor.** One per (destination population, source channel). It is stored in
the destination core.

| field | bits | meaning |
|---|---|---|
| — | 63:34 | reserved |
| `sl` | 33 | log2 of the stride (0: stride 1, 1: stride 2) |
| `wptr` | 32:18 | first weight word for this source channel |
| `kd` | 17:8 | kernel depth = destination channels (used as the weight stride) |
| `kh_m1`, `kw_m1` | 7:0 | kernel height − 1, kernel width − 1 |

**Weights.** Weights are 8-bit signed, eight per word, with byte 0 in bits 7:0. For one
source channel they are stored from `wptr` on, XY-transposed, at linear index
`(dx * KH + dy) * KD + c`. Weights are shared: several populations can point at the same
weight block. The testbench does this for two fragments of one layer.

**Neuron states.** States are 16 bits (signed integers, or half-precision floats for `ntype = 2`), four per word,
with lane `n[1:0]` of word
`start + axon_cnt + n / 4`. The neuron index is `n = (y * Wt + x) * D + c`, where
`Wt = w >> SL` is the true width.

## 3. Synapse computation unit (`rtl/scu.sv`)

Input: a firing neuron `(ID_p, x, y, c, v)` of a local population.

1. Read the population descriptor to get `start` and `axon_cnt`.
2. For each axon:

```
x_min = (x << US) + X_off          y_min = (y << US) + Y_off
c_dst = c + C_off
hit   = x_min < 8*wq  &&  x_min + KW > 0  &&  y_min < 8*hq  &&  y_min + KH > 0
if hit: emit event (AD, ID_p_dst, x_min, y_min, c_dst, v)
```

Hit detection is what makes cutting a layer into fragments cheap. A source neuron near a
fragment border sends its event only to the fragments its window actually overlaps. The
check is conservative, because the axon keeps the fragment size rounded up to a multiple
of 8 (see section 9). An event that slips through finds no neuron inside the map and
produces no synapse.

Arithmetic is 18-bit signed, so no intermediate value overflows. Events carry 10-bit
signed corners.

Timing, with no memory contention and a ready receiver:

* 2 cycles for the descriptor;
* then 3 cycles per axon: 2 for the read, 1 to emit or drop.

A population with `n` axons takes `2 + 3n` cycles per firing neuron.

## 4. Pattern/synapse lookup (`rtl/psl.sv`)

Input: an event `(ID_p, x_min, y_min, c_src, v)` from the local queue.

1. Read the population descriptor (`ID_p`) and the kernel descriptor (`kd_base + c_src`).
2. Walk the window:

```
for dx in 0 .. KW-1:   x = x_min + dx;   skip column if x < 0, x >= w, or (SL and x odd)
  for dy in 0 .. KH-1: y = y_min + dy;   skip if y < 0, y >= h, or (SL and y odd)
    (x, y) >>= SL
    for c in 0 .. D-1: synapse(state[c, x, y], weight[dx, dy, c], v)
```

**Stride.** A stride-2 convolution is an ordinary stride-1 convolution whose odd rows and
columns are then dropped. The destination is therefore described at stride-1 size
(`w`, `h` stored shifted left by `SL`). The PSL drops positions with an odd coordinate and
halves the survivors. Nothing about stride reaches the SCU, apart from the origin term in
the offset (section 6).

**Loop order.** The loop order is channel-first, so an out-of-range or dropped position
costs one cycle, not one cycle per channel. A column that is out of range as a whole is
skipped in one cycle.

**Weights.** A one-word weight cache avoids re-reading a word for consecutive weights.

Timing, with immediate grants and a ready neuron-update unit:

* 4 cycles for the two descriptors;
* 1 cycle per visited or skipped window position;
* 1 cycle per synapse;
* 3 extra cycles for each weight-word fetch.

A fully inside 3x3 window on a depth-1 map takes 28 cycles.

## 5. Neuron update (`rtl/neuron_update.sv`) and the core (`rtl/neuron_core.sv`)

**Neuron update.** The neuron-update unit takes one synapse at a time. It reads the state
word, changes one 16-bit lane and writes the word back, which takes 4 cycles per synapse.

* For `ntype = 0` the update is `s = sat16(s + w*v)`. This covers convolution, average
  pooling and dense layers.
* For `ntype = 1` it is `s = max(s, w*v)`. This is max pooling: the same connectivity as
  average pooling, with weights of 1.
* For `ntype = 2` the state is an IEEE half-precision float and the update is
  `s = fp16(s + w*v)`. The helper `rtl/fp16_acc.sv` forms the sum exactly in 43-bit
  fixed point and rounds once, to nearest with ties to even. A sum beyond 65504 becomes
  infinity and raises the saturation pulse. An infinite state stays infinite.

Because one synapse is handled at a time, two updates to the same word can never
interleave.

**Core dataflow.**

```
 fire_* --> SCU --(ad == 0)--> [mux, local wins] --> event queue (16) --> PSL --> neuron update
             |                      ^                                      |            |
             +--(ad != 0)--> noc_out_*    noc_in_* ------------------------+            |
                                                                                        |
   SCU, PSL, neuron update, host port ==> fixed-priority arbiter ==> 32768 x 64 memory <+
```

**Loopback.** Events for relative core 0 never leave the core. They enter the local queue
directly and win over a simultaneous network input.

**Memory arbitration.** The four memory users are served in the fixed order neuron
update, PSL, SCU, host port. Read data returns one cycle after the grant. Giving the
downstream units priority drains work before more is generated.

**Back-pressure.** Every link is a valid/ready handshake:

* a full queue stalls the SCU and the network input;
* a stalled network output stalls the SCU;
* the PSL waits for the neuron-update unit.

**Ports.**

* `fire_*`: firing neurons. The activation/threshold logic that decides who fires sits
  outside the core.
* `noc_in_*` and `noc_out_*`: events to and from the network.
* `host_req` / `host_rsp`: a loader port that reads and writes the memory.
* `idle`: high when every unit is idle and the queue is empty.
* `stat_*`: one-cycle pulses for monitoring (loopback, network in/out, hit-detection
  drops, synapses, edge and stride skips, saturations, queue full).

## 6. Working out the offsets

All per-layer geometry is folded into `X_off`, `Y_off` and `C_off` when the network is
mapped. The general form is:

```
X_off = (X0_src << US) - KW + XP + 1 - (X0_dst << SL)
Y_off = (Y0_src << US) - KH + YP + 1 - (Y0_dst << SL)
C_off = C0_src - C0_dst
```

Here `X0_src, Y0_src, C0_src` is the origin of the source fragment in its full feature
map, and `X0_dst, Y0_dst, C0_dst` is the origin of the destination fragment in its full
map. The terms mean the following:

* **Fragments.** A map too large for one population, or for one core, is cut in X, Y or
  channels. Each fragment is its own population, and the source gets one axon per
  destination fragment it can reach. The origin terms shift coordinates from the
  fragment's local frame into the other fragment's frame.
* **Upsampling** by `2^US` (nearest neighbour with the following convolution folded in)
  multiplies the source coordinates. The kernel then covers the upsampled grid.
* **Stride 2** is the `SL` term of section 4. Destination fragment origins are expressed
  at stride-1 resolution, hence `X0_dst << SL`.

Other layer types reuse the same mechanism:

* **Pooling** is a depthwise convolution with stride equal to the window. Average pooling
  uses weights `1/N` with accumulate neurons. Max pooling uses weights 1 with
  `ntype = 1`.
* **Dense layers** are 1x1 convolutions between `N x 1 x 1` and `M x 1 x 1` maps.
  **Flatten followed by dense** is a single convolution whose kernel covers the whole
  source map.
* **Depthwise and grouped convolutions** cut source and destination into depth-1 (or
  group-sized) populations connected pairwise.
* **Concatenation** of branches is done through the channel offset `C_off`.
  **Residual additions** are 1x1 depthwise connections with weight 1 from both sources. `tb_cnn_blocks` uses the equivalent dense form: a 1x1 connection whose per-channel kernel descriptors hold an identity matrix. This keeps the block in one population at the cost of zero-weight synapses.
* **Transposed convolutions (deconvolutions)** are the native operation of the scheme. The
  source padding and the destination size are chosen so that the window always lies
  fully inside the destination.
* **Upsampling with interpolation** is `US` followed by a fixed, untrained depthwise
  kernel that holds the interpolation weights.
* **Dilated convolutions** with rate `DR` are stored as ordinary kernels of size
  `DR*(KW-1)+1` by `DR*(KH-1)+1`, with zero weights in the holes.
  There is no dedicated hardware for them.

The full-size testbench builds its axons from exactly these formulas. See the comments
next to each `mk_axon` call in `tb/tb_neuron_core.sv`.

## 7. Capacity and real networks

The connectivity cost is small:

* a 3x3 convolution from a 64-channel map costs one axon per destination fragment;
* its kernel descriptors cost 64 words;
* neuron states dominate memory, at 2 bytes per neuron.

One core (256 kB) holds, for example, the first convolution of PilotNet:

* 24 x 31 x 98 outputs = 72,912 states = 142 kB;
* 1,800 weights.

Whole networks need many cores. Their sizes below (neurons at 2 B plus 8-bit weights)
come from the usual published architectures:

| network | memory needed | one 256 kB core holds it |
|---|---|---|
| PilotNet | ~0.45 MB | no; its largest layer (~144 kB) fits |
| MobileNet | ~11.2 MB | no |
| ResNet-50 | ~43.5 MB | no |
| DarkNet-53 | ~51.2 MB | no |
| ResNet-101 | ~72.2 MB | no |

PilotNet can still be run on a single core by loading it one layer at a time. `tb_pilotnet`
does this for the whole network:

* five convolutions: 5x5 stride 2 with 24/36/48 channels, then 3x3 with 64/64 channels;
* four dense layers 1152-100-50-10-1, written as convolutions.

It uses random weights and a random 3x66x200 image. The 18-wide flatten-plus-dense kernel
does not fit the 4-bit kernel field. As with any kernel wider than 16, it is therefore split into two 9-wide halves: two
axons, the second with `X_off` shifted by 9 and `C_off = 64`, so that it selects its own
64 kernel descriptors. Every state of every layer matches an ordinary convolution, and so
do the event and synapse counts.

One run took these cycle counts:

| layer | synapses | cycles |
|---|---|---|
| conv1 | 3.8 M | 15.9 M |
| conv2 | 5.4 M | 22.1 M |
| whole network | 11.6 M | 47.8 M |

That is about 4.1 cycles per synapse, close to the 4-cycle limit of the neuron-update
unit.

The full networks are intended for a grid of cores linked by a network, which this repository does not
contain (section 9). The 8-bit relative core address (4 bits per axis) lets a population reach its own core or any of the 255 nearest cores.

## 8. Verification

Each unit has a self-checking testbench in `tb/`. Each one:

* compares against a model written independently of the RTL;
* checks cycle counts where the timing is fixed;
* prints `TB_RESULT checks=N failures=M`;
* has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_core_mem` | random writes and reads at random addresses of the full 32768-word array (first and last word included), 1-cycle read latency, data held while idle |
| `tb_event_fifo` | order, full/empty flags, count, back-pressure, random valid/ready on both sides |
| `tb_scu` | a hand-worked fragmentation case (3x3 convolution, source fragment at (4, 4), destination fragments at X0 = 0 and 4 and at channel 2: corners, hits and drops), then random axons with upsampling, channel offsets and back-pressure against a reference, and the `2 + 3n` timing |
| `tb_psl` | random windows, strides and edges against a destination-centric reference, and the 28-cycle timing |
| `tb_neuron_update` | accumulate with positive and negative saturation, max, half-precision accumulate (rounding ties, subnormals, overflow, random cases against a real-number reference), lane selection, 4-cycle timing |
| `tb_neuron_core` | the whole core at default size, every mechanism (below) |
| `tb_pilotnet` | all nine layers of PilotNet on one default-size core, layer by layer (section 7) |
| `tb_cnn_blocks` | MobileNet and ResNet building blocks with twelve populations on one core: depthwise 3x3 through depth-1 populations, pointwise 1x1 joined through `C_off`, a residual block with identity shortcut, and a stride-2 residual block with 1x1 projection shortcut |

`tb_neuron_core` configures the core through the loader port. It fires 80 random neurons
of a 2-channel 16x4 map into six axons:

* a padded 3x3 convolution cut into two fragments that share weights;
* a stride-2 convolution;
* a convolution after 2x upsampling;
* a fragment on another core;
* a copy of the first fragment whose states are half-precision floats.

At the same time it injects max-pooling events through the network input. It then reads
back every state and compares it with an ordinary output-centric convolution, including
16-bit saturation in firing order. It also checks the events that leave the core. It
counts each mechanism and fails if any never occurs: loopback, network in, network out,
output back-pressure, hit-detection drops, edge skips, stride skips, saturation, queue
full, upsampled, max-pool and half-precision updates.

Running a testbench with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal rtl/scp_pkg.sv rtl/*.sv tb/tb_psl.sv \
          --top-module tb_psl
./obj_dir/Vtb_psl
```

Adding `+verilator+rand+reset+2` to the run randomises everything that is not reset,
which checks that nothing depends on initial values. The memory itself has no reset. The
loader writes every word that is read.

## 9. Departures from the source architecture and limitations

* **Number formats.** The source architecture keeps neuron states as 16-bit floats and
  weights in an adaptive 8-bit float format. Here the float state exists as neuron type 2
  (IEEE half precision, round to nearest even), and types 0 and 1 keep 16-bit signed
  integers with saturation. Weights and event values are 8-bit signed integers, not
  adaptive floats.
* **Neuron models.** The neuron models beyond accumulate and max, the activation function
  and the firing decision are not built. Examples are leaky integrate-and-fire and
  sigma-delta neurons with thresholds and resets. The `act` field is only carried along.
  The core takes firing neurons on a port.
* **Multiply layers.** Pointwise multiplication of two maps has the same connectivity as
  an addition, but it needs a multiplying neuron update. Only the accumulate and max
  updates exist here.
* **State allocation.** Every neuron has a persistent state word slot. The source
  architecture can also give neurons a temporary accumulator that is shared between
  neurons whose accumulation phases never overlap. That dynamic allocation is not built.
* **Network.** The network-on-chip, the array of cores and the host are not included.
  Events to other cores simply appear on `noc_out_*`.
* **Field choices.** Field positions within the words are this design's own. So are the
  following widths:
  * 5-bit population ID (32 populations per core);
  * 4-bit axon count (15 axons per population);
  * 8-bit event value;
  * `W/8`, `H/8` in the axon.

  Widening any of them is a change to `scp_pkg.sv`. The rounded size in the axon makes
  hit detection conservative for fragments whose size is not a multiple of 8. Results
  stay exact, but some useless events are sent.
* **PSL depth loop.** The PSL loops over the destination depth `D` and uses `KD` only as
  the weight stride. The mapper must keep `KD = D`.
* **Stride.** Only strides 1 and 2 are expressible, matching the 1-bit stride field.
  Larger strides must be split into several layers.
* **Throughput.** One synapse is applied every 4 cycles. Zero-weight skipping,
  quantisation tricks, SIMD lanes and multi-threading, which the source architecture uses
  to raise throughput, are not modelled. The RTL is functionally exact but not
  throughput-optimised.
* **Technology.** No process-specific parts exist. The memory is a plain array, and a
  chip implementation would map it onto SRAM macros.
