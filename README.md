# MPNA: two heterogeneous systolic arrays for CONV and FC layers

A convolutional layer reuses every weight hundreds of times. A fully-connected
(FC) layer, run on one input sample, uses every weight exactly once. A
conventional weight-stationary systolic array suits the first case. It loads a
block of weights, then streams many input vectors past them. In the FC case it
spends almost all its time reloading weights, so an 8x8 array gains little over
a single multiplier.

MPNA puts two 8x8 arrays side by side, and they share one input-vector stream:

* **SA-CONV** is a plain weight-stationary array. Weights are shifted in from
  the top. Each PE keeps two weight registers, so the next block of weights
  loads while the current one is still in use.
* **SA-FC** is the same array plus a dedicated wire from the weight buffer to
  every PE. All 64 weights can therefore change on every clock cycle. FC
  layers run on it at one multiply-accumulate per PE per cycle, with no reload
  bubbles. In CONV layers it behaves like SA-CONV and doubles the number of
  filters computed at once.

Behind the 16 array columns sit 16 accumulation sub-units and 16
pooling/activation sub-units. Both kinds are built around a 256-entry
scratch-pad. Pooling and activation therefore happen on-chip, before any
result reaches the 256 KB data buffer. The weights live in a 36 KB weight
buffer. Both buffers are filled from DRAM by two transfer channels that share
one DRAM port.

This repository gives synthesizable SystemVerilog for all of this, a
self-checking testbench per block, and an end-to-end testbench. The end-to-end
testbench runs a CONV layer and an FC layer through the complete chip at its
full 8x8 / 256 KB / 36 KB size.

```
                DRAM port (valid/ready requests, in-order read answers)
                               |
                        mpna_arbiter (round robin)
                       /                   \
              mpna_dma (weights)      mpna_dma (data, both ways)
                      |                     |
           mpna_wbuf 576 x 64 B      mpna_dbuf 32768 x 8 B
            port a      port b              | compute port
              |           |                 |
              |           +--------+   one 8-byte input vector per cycle
              v                    v        |
  SA-CONV  mpna_sa(DIRECT_W=0)  SA-FC mpna_sa(DIRECT_W=1)  <- same vector
   8 columns of psums               8 columns of psums
              \                    /
          16 x mpna_accum  (256 x 32-bit scratch-pad + adder)
          16 x mpna_pa_unit (requantise, 2x2 max pool, ReLU/leaky)
                               |
                        back into mpna_dbuf

  mpna_ctrl sequences everything from one layer descriptor per pass.
```

## Numbers at a glance

| Item | Value |
|---|---|
| Arrays | 2, each K x L = 8 x 8 PEs (128 MACs per cycle) |
| Operands | 8-bit signed. Partial sums are 24 bits in the array and 32 bits in the scratch-pads |
| Accumulation / pooling scratch-pads | 16 + 16 sub-units, 256 entries each |
| Weight buffer | 36 KB = 576 words x 64 bytes (one weight per PE), two read ports, 64-bit write port |
| Data buffer | 256 KB = 32768 words x 8 bytes (8 channels of one position), two ports |
| DRAM port | 32-bit word address, 64-bit data, shared by two transfer channels |

All constants are in `rtl/mpna_pkg.sv`.

## The processing element (`mpna_pe`)

Each PE holds the following registers:

* A **data register**. It passes the input value to the right neighbour.
* A **psum register**. It passes `psum_in + data * weight` down.
* Two **weight registers**:
  * The *shadow* register is part of a vertical shift chain. With `wload`
    high, every shadow register takes its upper neighbour's value. Eight
    `wload` cycles, bottom row first, load a whole array.
  * The *active* register feeds the multiplier.

The shadow value is copied into the active register when a **swap tag** passes
through the PE beside the data. The control unit sets the tag on the first
input vector of a new weight block. The tag then moves across the array with
that vector's diagonal wavefront. Each PE therefore switches weights exactly
when the first vector of the new block reaches it. The tail of the old block
is still flowing through the PEs further right, and it keeps its old weights.
Streaming never has to stop for a weight change.

With `DIRECT_W=1` (SA-FC) and `fc_mode` high, the active register instead
loads the PE's dedicated weight input every cycle.

## SA-FC: how an FC layer is streamed

This is the part of the design that needs the most care.

An FC layer computes `o[n] = sum_i w[n][i] * a[i]`. The 8 rows of the array
handle 8 inputs at a time (one data-buffer word). The 8 columns handle 8
groups of neurons. Column `l` owns neurons `l*U .. l*U+U-1`, where `U` (1 to
256) is the number of neurons per column.

**Input side.** An input word `a[8g .. 8g+7]` is held on the array's left edge
for `U` consecutive cycles. Row `k` sees it `k` cycles later because of the
input skew. While the word is held, column `l` computes partial sums for
neurons `l*U + j`, `j = 0..U-1`, one neuron per cycle. After `U` cycles, the
next word `g+1` follows with no gap. The partial sums for neuron `l*U+j` leave
column `l` at the bottom and are added into scratch-pad entry `j` of that
column's accumulation sub-unit. A whole pass takes `cg*U` input cycles for
`cg` input words.

**Weight side.** Every PE needs a different weight every cycle. Each PE sits
at a different point of the skewed wavefront, so the weight it needs at cycle
`t` is:

```
PE (row k, column l) at stream cycle t uses
    the weight of input  K*g + k     with  g = (t - k - l) div U
    for neuron           l*U + j     with  j = (t - k - l) mod U
(nothing, i.e. zero, when t - k - l < 0 or >= cg*U)
```

The weight buffer stores the weights **already in this order**. Word
`w_base + t` is one 64-byte word, with byte `[k][l]` for PE (k, l). It is read
through port b and applied to all 64 dedicated inputs at once. A pass reads
`cg*U + K + L - 2` words. The `K+L-2` extra words cover the filling and
draining of the diagonal wavefront. Their out-of-range slots hold zeros.

Example, K = L = 2, U = 2, cg = 1. Entries are (neuron, input):

| t | PE(0,0) | PE(1,0) | PE(0,1) | PE(1,1) |
|---|---|---|---|---|
| 0 | (0,0) | - | - | - |
| 1 | (1,0) | (0,1) | (2,0) | - |
| 2 | - | (1,1) | (3,0) | (2,1) |
| 3 | - | - | - | (3,1) |

**Timing.** A vector enters on stream cycle `t`. Column `l` delivers its
partial sum to the accumulation unit `K + 1 + l` cycles later, with `l`
counted from 0. One cycle of that is the array's input register. The
testbenches check this latency and the total pass length.

**Size limits.** The whole aligned stream of a pass must fit in the weight
buffer: `cg*U + 14 <= 576`. Larger layers are cut into passes:

* For each neuron group (at most 8 x 256 = 2048 neurons), the host loads the
  weights of one input slice.
* It runs a pass with `accumulate` set on every pass but the first, and
  `finish` set on the last.

The DRAM bandwidth needed to refill the weight buffer, not the array, then
sets the speed of large FC layers.

## CONV dataflow

A CONV pass computes 16 output channels (8 on each array) of a `P x Q`
convolution with stride 1. The input must already be padded. The filters are
cut into **chunks**. A chunk is one kernel position `(p, q)` together with one
group of 8 input channels. For each chunk:

1. The control unit shifts an 8 x 8 weight block into each array, one row per
   cycle:
   * SA-CONV gets word `w_base + 2c` through port a;
   * SA-FC gets word `w_base + 2c + 1` through port b;
   * byte `[k][l]` of those words is channel `k` of the chunk for filter `l`.
2. It streams the `M x N` input vectors that the chunk touches (`M = H-P+1`,
   `N = W-Q+1`), one per cycle. The first vector carries the swap tag.
3. Each output position `(m, n)` accumulates into scratch-pad entry `m*N + n`.
   The very first chunk writes instead of adding, unless `accumulate` is set.

The chunk order is channel group fastest, then `q`, then `p`. The next chunk's
weights start to load `K + L` cycles after the current chunk started
streaming. By then the swap wavefront has passed every PE, and the shadow
registers are free. The load itself takes `K + 2` cycles. When
`M*N >= 2K + L + 2` it is finished before the current chunk ends. The next
chunk then starts on the cycle after the current chunk's last vector. A whole
pass takes `chunks x M x N` cycles plus about `K` for the first load. For a
13x13 output with 216 chunks, that is 36,515 cycles for 36,504 vectors. Output maps of up to 256 positions stay in the scratch-pads for the
whole pass. This is why the scratch-pad has 256 entries: a 13x13 map
(169 positions) fits. Larger maps are handled by the host in row bands.

## Accumulation, pooling and activation

**`mpna_accum`** is a 256 x 32-bit register file with a combinational read
and an adder. A psum arriving with `valid` is added to the entry at its
address, or written there if `first` is set. A separate read address drains
finished results.

**`mpna_pa_unit`** receives the drained accumulator values one per cycle. Its
stages are:

1. **Requantise.** The 32-bit sum is shifted right arithmetically by `shift`,
   then saturated to int8.
2. **Two input registers** hold the newest sample (input ②) and the one before
   it (input ①).
3. **`mpna_pool`** takes `max(①, ②)`, then the maximum of that and the
   partial pool stored in the scratch-pad (input ③). The per-sample command
   (`pair`, `use_spm`) decides which inputs take part.
4. A pipeline register follows, then **`mpna_activ`** (bypass, ReLU, or leaky
   ReLU `x*alpha`, alpha in Q1.7, rounded toward zero and saturated).
5. The result ④ is written back to the scratch-pad at the command's address.
   A result still in the pipeline register is forwarded to ③ when the next
   sample needs the same entry.

For 2x2/stride-2 pooling, the control unit drains the top row of a window as
a pair and stores its maximum without activation. It then drains the bottom
row as a pair, combines it with the stored value, and applies the activation.
Activation is thus applied once, after pooling. This is the cheaper order,
and it gives the same result for monotone activations. Without pooling every
value goes straight through the activation.

The write-back stage then reads the 16 pooling scratch-pads together. It
writes two data-buffer words per output position, one per array.

## Memory layouts and the layer descriptor

**Activations** are stored channels-last. One 64-bit word holds 8 channels of
one position. Position `(y, x)` of a map with `cg` channel groups starts at
word `base + (y*W + x)*cg`.

CONV results of position `o` (row-major in the output map) go to:

* word `out_base + o*out_cg + out_g` (SA-CONV filters);
* the word after it (SA-FC filters).

Successive 16-filter passes with `out_g = 0, 2, 4, ...` thus build an output
map in the same layout that the next layer reads.

FC results: word `out_base + j`, byte `l` holds neuron `l*U + j`.

**Weights** are 64-byte words, as described in the two dataflow sections. The
weight transfer channel writes them 8 bytes at a time. Its buffer address is
counted in 8-byte units: word = addr / 8, lane = addr mod 8.

**Descriptor** (`layer_desc_t` in `mpna_pkg`):

| Field | Meaning |
|---|---|
| `kind` | `LAYER_CONV` or `LAYER_FC` |
| `in_base`, `h`, `w`, `cg` | Input map: base word, rows, columns, channel groups. For FC, `cg` is the number of input words |
| `p`, `q` | Kernel size (CONV) |
| `u` | Neurons per column (FC) |
| `w_base` | First weight word |
| `out_base`, `out_cg`, `out_g` | Output placement (see above) |
| `accumulate` | Keep the scratch-pad sums from the previous pass |
| `finish` | Pool, activate and write back at the end of this pass |
| `pool`, `act`, `alpha`, `shift` | 2x2 max pooling on/off, activation type, leaky slope, requantisation shift |

`layer_start` starts a pass. `layer_busy` stays high until it ends, and
`layer_done` pulses at the end.

## DRAM side

There are two `mpna_dma` channels:

* the weight channel, which only loads (DRAM to weight buffer);
* the data channel, which loads and stores (DRAM to and from the data buffer).

Each channel is started with a DRAM word address, a buffer address and a
length, and pulses `done` at the end. Loads issue read requests back to back.
Stores move one word every two cycles.

`mpna_arbiter` grants the DRAM port round robin between requesting channels.
It records the channel of each read it forwards in a small FIFO, and uses the
FIFO to return the in-order read answers to the right channel. It will not
forward a read when that FIFO is full. An assertion flags an answer that
arrives with no read outstanding.

The host may run transfers while a layer pass is computing. The data channel
uses the data buffer's second port, and on a same-word write conflict it wins
over the compute port. The host must keep transfers away from the words a
running pass uses.

The DRAM itself is outside the design. Its request/response port is the top
module's `dram_*` ports.

## Running a network on it

Per layer, the host:

1. loads weights with the weight channel and inputs with the data channel,
   overlapping the two where it can;
2. issues one descriptor per 16 filters (CONV) or per neuron group and input
   slice (FC);
3. stores results with the data channel.

For AlexNet at the built size:

* CONV3, CONV4 and CONV5 keep their input and output maps entirely on-chip.
  CONV4 needs 151 KB of the 256 KB. Its input is stored as two channel halves.
  Each 16-filter group then runs as two 432-word passes, the second with
  `accumulate`.
* CONV3's 288 chunks use exactly the 576 weight words. CONV4 and CONV5 need
  two accumulating passes per filter group.
* CONV2's 27x27 output is split into row bands of 9 rows.
* The FC layers run as many accumulating passes. The weights stream through
  the 36 KB buffer, so DRAM bandwidth limits these layers.

AlexNet needs two things this design does not provide: CONV1's stride of 4,
and the overlapping 3x3/stride-2 pooling.

## Where this design departs from, or adds to, the published one

The published design gives the block diagram, the PE, the accumulation and
pooling/activation sub-units and the FC dataflow. The following are this
design's own choices or readings:

* **Widths.** Only the 8-bit operand width is given. The 24-bit array psums
  and 32-bit scratch-pad entries are chosen here.
* **Scratch-pad entries.** The scratch-pads are listed as "256B", but also as
  holding 256 elements. The pooling scratch-pads here are 256 x 8 bits, which
  matches both. The accumulation scratch-pads keep 256 entries but make each
  one 32 bits wide, because an 8-bit entry cannot hold a running sum.
* **Requantisation.** The shift-and-saturate step before pooling is not
  described in the source. It is added here.
* **Weight swap.** The swap-tag mechanism that times the active-weight switch
  is this design's own. The source only says a second register holds the
  weights in use while the next ones move in.
* **Weight buffer.** Its organisation (64-byte words, two read ports) and the
  pre-aligned FC weight order in it are chosen here to feed 64 dedicated
  connections per cycle.
* **Latency.** The array latency is one cycle longer than the published
  timing diagram, because of the input register.
* **Shared vector stream.** Both arrays take the same input vector. A CONV
  pass therefore computes 16 filters. FC passes use SA-FC alone. SA-CONV's
  psums are ignored in FC mode, because its weights cannot change fast enough
  to help.
* **Control and DRAM side.** The control unit, the layer descriptor, the
  layouts, the DMA channels and the DRAM port protocol are all this design's
  own. The source only names a control unit and an arbiter.
* **Layer shapes.** Only stride 1 with pre-padded inputs, and only
  non-overlapping 2x2 pooling, are sequenced. Larger layers (the source's
  tiling "cases") are cut into passes by the host. The hardware does not do
  that on its own.
* **Memories.** The buffers are written as plain arrays with a one-cycle
  read. A chip would use SRAM macros.

## How far it can be trusted

Every block has a self-checking testbench in `tb/` that compares the block
against an independent model:

* the PE, skew, arrays, accumulation, pooling, activation and pooling/
  activation unit against arithmetic done in the testbench;
* the buffers against shadow arrays;
* the arbiter and DMA against a DRAM model with random backpressure and
  latency;
* the control unit against the arrays and SPMs it drives.

Each testbench was also run against a deliberately broken copy of its block,
to make sure it fails.

`tb_mpna_top` runs the top module with all parameters at their defaults. It
loads data and weights from a DRAM model through both channels at once, with
random backpressure and latency. It then runs:

* a CONV layer: 8x8x16 input, 16 filters 3x3, 2x2 max pooling, leaky ReLU;
* an FC layer: 32 inputs, 40 neurons, ReLU.

It stores the results back to DRAM and compares every output byte with a
reference computed in the testbench. It also checks the pass lengths:

* the FC pass takes exactly `cg*U + K + L - 2` stream cycles;
* the CONV pass takes at most `chunks x M x N + 2K`, so weight loads are
  hidden. It counts each mechanism and fails if any
never happened:

* weight loading overlapped with streaming;
* swaps;
* three-input pooling;
* the leaky path and saturation;
* DRAM contention and backpressure.

`tb_mpna_alexnet` runs layers of real AlexNet size on the full design:

* one 16-filter group of CONV4: 13x13 output, 384 input channels, as two
  accumulating passes of 216 chunks each;
* FC8's full 1000-neuron width (U = 125) over the first 96 inputs, as three
  accumulating passes of 514 weight words.

It checks all 3,708 outputs and the cycle count of every pass. It finishes in
about a second.

Not covered:

* a complete network, with layers chained through the data buffer;
* row-band splitting of a large output map (as CONV2 needs); it uses only
  descriptor fields that are tested, but was not run;
* stride > 1 and overlapping pooling, which the control unit does not
  sequence;
* timing closure at the published 280 MHz (no synthesis to a technology is
  included).

## Simulating

Everything runs with plain Verilator 5. For a block testbench:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
    rtl/mpna_pkg.sv rtl/*.sv tb/tb_mpna_pe.sv --top-module tb_mpna_pe -o sim
./obj_dir/sim
```

Replace `tb_mpna_pe` with any file in `tb/`. Each testbench prints one line
`TB_RESULT checks=N failures=M` and stops. Each has a watchdog, so a hung
design also ends with a failure. The full-chip test `tb_mpna_top` finishes in
seconds.

To change the workload of the full-chip test, edit the layer sizes and
descriptors in `tb/tb_mpna_top.sv`. The reference model there recomputes the
expected results from whatever it is given.

## Files

| File | Contents |
|---|---|
| `rtl/mpna_pkg.sv` | Sizes, types, command structs, layer descriptor |
| `rtl/mpna_pe.sv` | Processing element (double-buffered weight, optional dedicated weight input) |
| `rtl/mpna_skew.sv` | Input staggering, row k delayed k cycles |
| `rtl/mpna_sa.sv` | K x L array with skew and per-column metadata pipeline (SA-CONV / SA-FC) |
| `rtl/mpna_accum.sv` | Accumulation sub-unit |
| `rtl/mpna_pool.sv`, `rtl/mpna_activ.sv` | Max-pooling and activation datapaths |
| `rtl/mpna_pa_unit.sv` | Pooling & activation sub-unit |
| `rtl/mpna_wbuf.sv`, `rtl/mpna_dbuf.sv` | Weight and data buffers |
| `rtl/mpna_dma.sv`, `rtl/mpna_arbiter.sv` | Transfer channel and DRAM arbiter |
| `rtl/mpna_ctrl.sv` | Control unit (CONV and FC passes, pooling drain, write-back) |
| `rtl/mpna_top.sv` | Top level |
| `tb/tb_<module>.sv` | One self-checking testbench per block; `tb_mpna_sa_conv` and `tb_mpna_sa_fc` cover the two array variants |
| `tb/tb_mpna_alexnet.sv` | AlexNet-sized CONV4 and FC8 passes on the full design |
