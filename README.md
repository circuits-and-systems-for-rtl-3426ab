# Kraken perception core: spiking and ternary inference engines in SystemVerilog

A nano-drone has a power budget of a few watts. Its perception has to run
inside a small fraction of that, and the sensors do not produce one kind of
data. An event camera (DVS) sends a sparse stream of per-pixel brightness
changes. A frame camera sends dense images. Kraken handles both with two
dedicated engines next to a RISC-V cluster:

* **SNE** (Sparse Neural Engine) runs spiking convolutional networks. Its
  work is proportional to the number of events, so a quiet scene costs
  almost nothing.
* **CUTIE** (Completely Unrolled Ternary Inference Engine) runs ternary
  convolutional networks. Weights and activations are in {-1, 0, +1}. All
  weights stay on chip, and all 96 output channels of a 3x3 layer are
  computed in parallel, one output pixel per clock cycle.

This repository holds synthesizable RTL for the digital core around these
two engines:

* the 1 MiB L2 with its logarithmic interconnect;
* a DVS interface that stores sensor events in L2 as SNE event words;
* the complete SNE;
* the complete CUTIE;
* the 128 kB, 16-bank L1 memory that the cluster cores share.

The processor cores, peripherals, clock-domain crossings and power control
are not included. Their connections are ports of the top module,
`kraken_soc`.

```
 DVS sensor ──► dvsi ──┐
 host port ────────────┤           ┌────────────── sne ──────────────┐
                       ├─ log. ──► │ streamer 0 ─► xbar ─► 8 slices  │
                       │  inter-   │ streamer 1 ◄─ xbar ◄─ collector │
                       │  connect  └─────────────────────────────────┘
                       └─► 4 interleaved L2 banks (64k x 32 each)

 weights ─► cutie weight memories ─► 96 OCU weight buffers (double)
 image ───► feature-map bank A/B ─► tile buffer ─► 96 OCUs ─► compressor ─┐
                 ▲                                                         │
                 └──────────────── write-back to the other bank ◄─────────┘

 8 core ports ─► logarithmic interconnect ─► 16 TCDM banks (2k x 32 each)
```

Everything runs on one clock with an active-low asynchronous reset
(`rst_n`).

## Event words

SNE and the DVS interface use one 32-bit event format, defined in
`sne_pkg`:

| bits | spike event (op = 1) | time event (op = 2) |
|------|----------------------|---------------------|
| 31:28 | op = 1 | op = 2 |
| 27:24 | reserved | timestamp[27:24] |
| 23:16 | channel c | timestamp[23:16] |
| 15:8 | y | timestamp[15:8] |
| 7:0 | x | timestamp[7:0] |

A time event moves the engine's notion of "now" forward. Leakage is computed
from it.

The DVS interface writes:

* a spike event for each sensor event, with channel = polarity;
* a time event, carrying a frame counter, at each frame boundary.

## SNE

### Neurons: lazy leak, fused with the spike

Each **cluster** (`sne_cluster`) holds 64 leaky integrate-and-fire neurons
and updates one neuron per cycle. The 64 neurons are an 8x8 tile of one
output channel. A neuron stores two values:

* its 8-bit membrane potential `v`;
* the time `t_last` at which it was last touched.

The leak is not applied every time step. It is applied lazily when the
neuron next receives input, using `dt = now - t_last`:

* `dt = 0`: no decay.
* `1 <= dt <= 16`: `v = (v * lut[dt-1]) >>> 8`, where `lut` holds per-layer
  decay factors in 1/256 units.
* `dt > 16`: the potential has decayed to zero.

Then the 4-bit signed weight is added, with the result saturated to 8 bits,
and `t_last = now`. If `v >= threshold`, the neuron emits an output spike and
resets to 0. Clearing a tile's neuron memories is a separate 64-cycle command.

### One input spike, nine steps

A 3x3 convolution maps an input spike at (x, y, c) onto up to nine output
neurons: (x+1-kx, y+1-ky) for kernel tap k = 3*ky + kx, with weight w[c][k].

The **sequencer** (`sne_sequencer`) drives each spike through nine steps
k = 0..8. Every cluster of the slice sees every step. A cluster updates the
neuron only if that neuron lies in its tile; otherwise it ignores the step.

A spike therefore costs 12 cycles: nine update steps plus three cycles to
restart. The next event is accepted in the twelfth cycle. Because SNE's work
follows the event count, this is the figure to reason with. A time event
costs one cycle.

If a cluster's output register is still occupied when it has to fire again,
the step stalls until the collector has taken the spike.

### Slices, tiles and weights

A **slice** (`sne_slice`) has:

* 16 clusters in a 4x4 grid, so it covers a 32x32 tile of one output channel;
* a shared weight buffer of 256 channels x 9 taps x 4 bits;
* the threshold and the 16-entry decay LUT.

The eight slices can cover eight output channels of one tile, or eight tiles
of one channel. The host sets each slice's tile origin and output channel in
its register.

Weights are loaded as 32-bit words of eight nibbles: nibble i of word n is
weight index 8n+i, and weight index = c*9 + k. Parameter word 0 is the
threshold; words 1..4 are the LUT bytes, lowest byte first.

### Data movement

Two **streamers** (`sne_streamer`) act as DMA engines on two L2 ports:

* Streamer 0 reads a buffer of LEN words.
* Streamer 1 writes an output stream to consecutive addresses and counts the
  words.

The **crossbar** (`sne_xbar`) decides where the words go:

* `target` selects whether streamer 0 carries events, weights or neuron
  parameters.
* `in_src` selects where the slices' input comes from: streamer 0 (input
  broadcast) or the collector (internal redirection, so one slice's outputs
  feed the next layer).
* `out_dst` selects where the collector's output goes: to streamer 1 (output
  streaming) or back to the slices.
* `mask` selects the slices.

An event is broadcast only when every selected slice is ready.

The **collector** (`sne_collector`) merges the output spikes of the clusters
within a slice, and of the eight slices, in round-robin order. Each input has
its own two-entry FIFO.

### Programming one layer tile

The register map is in the header of `rtl/sne.sv`. The sequence is:

1. XBAR.target = weights, S0_BASE/S0_LEN → CTRL.start0; wait for STATUS[0] = 0.
2. XBAR.target = parameters, S0_BASE/S0_LEN (5 words) → CTRL.start0.
3. Write SLICE[s] (tile origin, output channel); CTRL.init clears the neurons.
4. S1_BASE → CTRL.start1 opens the output stream.
5. XBAR.target = events, S0_BASE/S0_LEN → CTRL.start0.
6. Wait for `eoc`. It pulses once the input stream has been consumed and the
   slices, the collector and the write path are all empty. S1_COUNT then says
   how many output events were written.

## CUTIE

### Ternary values and compression

A trit is 2 bits in two's complement: 00 = 0, 01 = +1, 11 = -1.

For storage, five trits share a byte: `code = sum (t_i + 1) * 3^i`, which is
at most 242. That gives 1.6 bits per trit. A 96-channel pixel or filter row
is therefore 20 bytes (160 bits).

`cutie_compressor` and `cutie_decompressor` convert between the two forms.
Both are purely combinational.

### The output channel compute unit (OCU)

Each of the 96 OCUs (`cutie_ocu`) owns one output channel. For every output
pixel it receives the same 3x3x96 input window and forms 864 ternary
products. A product is +1 when both trits are non-zero with equal sign, and
-1 when the signs differ. The two kinds are counted separately (11 bits each)
and subtracted, giving a 12-bit result.

The OCU is a 3-stage pipeline:

1. **Multiply and count.**
2. **Optional 2x2 pooling**, by maximum or by sum. A half-width line buffer
   keeps the pooled pairs of even rows until the odd row arrives.
3. **Ternarisation** against two thresholds: +1 if `v > hi`, -1 if `v < lo`,
   otherwise 0.

The weight buffer has two banks. Each bank holds nine taps of 96 trits plus
the threshold pair `{hi[31:16], lo[15:0]}`, written as "tap 9". The OCUs
compute with one bank while the controller fills the other with the next
layer.

### Feeding the OCUs

The **feature-map memory** (`cutie_fmap_mem`) has two banks of 1024
compressed pixels. Layer l reads bank l%2 and writes bank (l+1)%2. The input
image goes into bank 0. After the last layer, STATUS names the bank that
holds the result.

The **tile buffer** (`cutie_tile_buffer`) keeps three image rows in a circular
buffer. For a centre pixel it outputs the zero-padded 3x3 window.

Per output row y, the controller first loads any of rows y and y+1 that are
not yet buffered (W+1 cycles per row). It then issues W windows, one per
cycle. A 32x32 layer takes about 32*(2*32+1)+33 cycles.

### Layers without the host

The weights of all layers live in per-OCU **weight memories**
(`cutie_weight_mem`). For OCU o, word 10*l + t holds tap t of layer l, and
word 10*l + 9 holds layer l's thresholds.

The host writes the weights and the layer table:

* LAYER[l]: input width and height, pooling on/off, max/sum.
* NUM_LAYERS.

It then starts the inference once.

The controller loads layer 0's weights into bank 0 of the OCU buffers (11
cycles). It then runs the layers back to back. At the start of each layer it
copies the next layer's weights into the idle bank. The switch to the next
layer therefore costs no loading time; the OVERLAP register counts such
pre-loaded switches.

`eoi` pulses when the last layer has been written back. The 8 layer slots
(`N_LAYERS`) are this design's choice.

## Memories and interconnect

`log_interconnect` connects M masters to B single-port banks:

* The banks are interleaved by word address: bank = addr[2 +: log2 B].
* Each bank has its own round-robin arbiter.
* A master holds `req` (with `we`, `addr`, `wdata`) until `gnt`.
* Read data come with `rvalid` in the cycle after the grant.
* Masters that address different banks never wait for each other.

Two instances use it:

* `l2_mem`: 4 masters onto 4 banks of 64k words.
* `cluster_tcdm`: 8 core ports onto 16 banks of 2k words.

Both are built from `sram_bank`, a synchronous single-port memory.

## Top level and sizes

`kraken_soc` wires the blocks together. Its L2 masters are:

| master | source |
|--------|--------|
| 0 | host (fabric controller / IO) |
| 1 | SNE streamer 0 |
| 2 | SNE streamer 1 |
| 3 | DVS interface |

CUTIE's weight and feature-map ports are top-level ports.

| parameter | default | meaning |
|-----------|---------|---------|
| L2_BANKS x L2_BANK_WORDS | 4 x 65536 | 1 MiB L2 |
| SNE_SLICES | 8 | SNE slices (16 clusters x 64 neurons each) |
| CUTIE_OCUS / CUTIE_CIN | 96 / 96 | output / input channels |
| CUTIE_IMG | 32 | feature-map width and height |
| CUTIE_LAYERS | 8 | layer slots in the weight memories (own choice) |

## Departures and limits

* **SNE linear layers** (fully connected, up to 2304 inputs) are not
  implemented. Only 3x3 convolutions are mapped onto the clusters.
* **Formats and registers are this design's own.** This covers the event
  word format, the register maps, the DVS buffer behaviour (words beyond the
  buffer size are dropped and counted), the crossbar encoding and the
  streamer protocol.
* **SNE neuron details are this design's own.** This covers the LUT-based
  decay with 16 entries and the reset-to-zero after a spike.
* **CUTIE pooling by sum** outputs the 2x2 sum instead of the average. The
  thresholds absorb the factor 4.
* **CUTIE thresholds** are 16 bits. They are stored in bits [31:0] of a
  compressed weight word, so `N_I` must be at least 16. The threshold
  comparison direction is this design's choice.
* **CUTIE row loading and window computation** alternate per row instead of
  overlapping. This roughly doubles the layer time compared with an ideal
  one-pixel-per-cycle schedule.
* **The OCU weight buffers** are flip-flops, not latches.
* **One clock only.** The real chip has separate domains with clock-domain
  crossings.

## Simulation

Every block has a self-checking testbench in `tb/`. Each testbench:

* compares the block with an independent reference;
* prints `TB_RESULT checks=N failures=M`;
* has a watchdog.

The SNE testbenches share a reference LIF model, `tb/sne_ref_pkg.sv`.

`tb_kraken_soc` runs the whole top at its default sizes:

* DVS events into L2;
* SNE weight/parameter loading and inference, checked against eight
  reference slices;
* a two-layer, 96-channel CUTIE inference on a 32x32 image, checked bit for
  bit;
* concurrent checked traffic on the host port and on all eight TCDM ports.

It counts each mechanism and fails if one never happens: DVS buffer
overflow, L2 and TCDM bank conflicts, SNE time events, SNE end of execution,
CUTIE pooling, CUTIE weight pre-loading, and CUTIE end of inference.

With verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/sne_pkg.sv rtl/cutie_pkg.sv \
  tb/sne_ref_pkg.sv tb/tb_kraken_soc.sv --top-module tb_kraken_soc -o sim
obj_dir/sim
```

Other testbenches build the same way with their own top.
`tb_sne`, `tb_sne_cluster` and `tb_sne_slice` also need `tb/sne_ref_pkg.sv`.
The full-size system test takes about three minutes to build and run.
