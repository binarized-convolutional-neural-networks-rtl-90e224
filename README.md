# A convolution accelerator for binarized CNNs with separable filters

In a binarized CNN every weight and every activation is +1 or -1, so a
multiply is an XOR and a dot product is an XOR followed by a count. This design
goes one step further. Each binary 3x3 filter is constrained to have rank one,
F = u vᵀ, where u and v are binary 3-vectors. Two things follow:

* **Six products instead of nine.** A 3x3 convolution with F is a 3x1
  vertical convolution with u followed by a 1x3 horizontal convolution with
  v. That is 6 multiply-accumulates per channel and window instead of 9.
* **Five bits per filter instead of nine.** (u, v) and (-u, -v) give the same
  filter, so only 2^(2·3-1) = 32 distinct filters exist. Each one is stored
  as a 5-bit code, and a small decoder turns the code back into (u, v).

The RTL here implements the six convolutional layers of a CIFAR-10 network,
"Binarized Convolutional Neural Networks with Separable Filters for Efficient
Hardware Acceleration" (Lin, Xing, Zhao, Zhang, Srivastava, Tu and Gupta). The network is a
32x32x3 image followed by 128-128-pool-256-256-pool-512-512-pool. A host
drives the accelerator one call at a time:
1. Load an image.
2. For each layer, load its filter codes and batch-norm constants, then run it.
3. Stream the last feature map back.

The host also computes the dense layers. Intermediate feature maps never leave
the chip.

The overall structure follows the published accelerator:
* one unit for the first, non-binary layer;
* one configurable unit for all binary layers;
* pooling and batch-norm hardware;
* on-chip feature and weight RAMs;
* 5-bit codes with a decoder;
* large layers split over several calls because weight storage is limited.

The published design does not give its parallelism, memory organisation,
number formats or host interface. Everything in those areas is this design's
own, and is flagged as such below and in the first comment of each file.

## Binary separable filters and their codes

Bit convention throughout: a stored 1 means +1 and a 0 means -1. This holds for
activations, for u and v, and for filter taps.

Which code stands for which filter is this design's choice. For a code c:

    s = c[4]
    l = s ? ~c[3:0] : c[3:0]
    a = (+1, l[1] ? -1 : +1, l[0] ? -1 : +1)      -- indexed by row
    b = (+1, l[3] ? -1 : +1, l[2] ? -1 : +1)      -- indexed by column
    F = (s ? +1 : -1) · a bᵀ

The resulting table has these properties:
* Code 0 is the all -1 filter and code 31 the all +1 filter.
* Code 31-k is always the negation of code k.
* Codes 0..15 list the 16 sign patterns with a leading -1 in the corner.

This is the order in which the authors' chart of filter frequencies lays out
the 32 filters.

`filter_decoder` outputs a pair (u, v) with v[0] = +1 and u = s·a. Any pair with
the same outer product would do.

The first layer's filters are binary separable filters too. Only its input is
not binary.

## The binary convolution unit (`sep_conv_bin`)

This is the arithmetic core. Each cycle it receives:
* a 3x3 window of 64 input channels: 9 words of 64 bits, tap t = 3·row + column;
* the 64 codes that connect those channels to one output channel;
* `row_ok` and `col_ok`, which mark the window rows and columns that lie inside
  the map.

Per channel, with x[i][j] the window bits:

    col[j] = Σ_i  row_ok[i] ? (x[i][j] XOR u[i] ? -1 : +1) : 0        j = 0..2
    ch     = Σ_j  col_ok[j] ? (v[j] ? col[j] : -col[j])   : 0

The 64 channel results are summed by an adder tree. Synthesis builds the tree
from a plain loop. The sum is added into a 16-bit accumulator:
* `in_first` restarts the accumulator for a new output pixel.
* `in_last` marks the last group of 64 input channels.
* One cycle after `in_last`, `out_valid` is high and `out_sum` holds the full
  convolution over all input channels.

Padding is "same" with zeros: a tap outside the map contributes 0, neither +1
nor -1. The bound is 512 channels · 9 taps = 4608 in magnitude, well inside 16
bits.

`sep_conv_fix` is the first-layer unit. It does the same arithmetic on three
signed 8-bit pixel channels: sign flips replace the XORs, there is one window
per output pixel, and there is no group accumulation.

## Feature storage: nine banks that return a whole window (`window_ram`)

The convolution unit consumes a full 3x3 window every cycle. Nine pixels per
cycle from ordinary single-read RAMs would need nine banks, arranged so that the
nine pixels of any window always fall into different banks. `window_ram` does
exactly that.

A feature map has height H, width W and C channels. A memory word holds 64
channels of one pixel, so each pixel takes G = C/64 words ("groups"). Pixel
(y, x), group g is stored in:

    bank    = 3·(y mod 3) + (x mod 3)
    address = ((y div 3)·WQ + (x div 3))·G + g        with WQ = ceil(W/3)

Any three consecutive rows cover all three residues mod 3, and so do any three
consecutive columns. So the nine taps of a window hit nine different banks. Each
bank then computes its own address:
* A bank holding a tap from the row above the centre may lie in the centre's
  3-row block or the one above it.
* The RAM works this out from (y + dy + 2) div 3 - 1, so no negative
  intermediate is needed.
* Taps outside the map read some harmless address, and the convolution unit
  masks them.

The nine read words come back one cycle later. A registered tap-to-bank map
puts them in tap order.

Example: for a 32x32 map with 128 channels, WQ = 11 and G = 2. Each bank holds
11·11·2 = 242 words. That is the largest map of the network, Conv-1's output,
which is why each bank has 256 words of 64 bits.

Three instances exist:
* an image RAM (24-bit words, 128 deep);
* two 64-bit feature buffers that alternate as source and destination from
  layer to layer (`src_buf` selects the one read).

The write side uses the same address formula with the output map's WQ and G.
A layer can therefore read a 32x32 map and write a 16x16 pooled one.

## Calls, streams and the controller (`accel_ctrl`)

The host writes a `layer_cfg_t` on `cfg` and pulses `start`. `busy` stays high
until `done` pulses. The fields of `layer_cfg_t` are:
* `op`: the call type;
* `first`: the call is Conv-1;
* `pool`: apply pooling;
* `src_buf`: the buffer to read;
* `h`, `w`: input size;
* `in_groups`, `out_groups`: channels / 64;
* `oc_base`, `oc_count`: the output-channel range of the call, multiples of 64.

Data travels on two 64-bit valid/ready streams.

| call | input stream | effect |
|---|---|---|
| `OP_LOAD_IMG` | H·W beats, row-major. Each beat carries one pixel: three signed 8-bit channels, channel c in bits [8c+7:8c]. | fills the image RAM |
| `OP_LOAD_WT` | One weight word per (output channel, input group), group innermost. A word holds 64 codes, code c in bits [5c+4:5c]. It is sent as 5 beats, least significant first. For Conv-1 a word holds the 3 codes of one output channel. | fills the weight RAM from address 0 |
| `OP_LOAD_BN` | `oc_count` beats carrying {k, h} in bits [31:0], k in the upper half | fills the batch-norm RAM |
| `OP_RUN` | none | computes channels `oc_base` .. `oc_base+oc_count-1` into the other buffer |
| `OP_DRAIN` | none; the output stream carries one 64-bit word per pixel and group, row-major, groups innermost | reads buffer `src_buf` |

A run call walks this loop nest, outermost first:
1. output row;
2. output column;
3. output channel;
4. pooling sub-pixel (four when pooling, else one);
5. input group.

Every cycle it issues one window read, one weight-word read and (once per
output channel) one batch-norm read. The pipeline behind the issue stage is:

| stage | what happens |
|---|---|
| 0 | RAM addresses issued |
| 1 | window, codes → convolution unit |
| 2 | convolution sum → max pool |
| 3 | pooled sum, k, h → batch norm |
| 4 | output bit → shifted into a 64-bit word |

The word is written to the destination buffer when all 64 channels of an output
pixel and group are present. Control signals travel with the data as a tag
through the pipeline, so nothing ever stalls inside a run.

A run call takes out_pixels · subs · oc_count · in_groups cycles, plus 6. The 6
are counted from the clock edge that samples `start` to the one that raises
`done`, and cover call set-up and pipeline drain.

The input stream may pause at any time, and the output stream honours
back-pressure. A drain moves one word every three cycles.

Assertions check three rules:
* the output stream holds its data while stalled;
* output-channel ranges are aligned;
* `start` only arrives when idle.

## Pooling and batch normalisation

The network pools after Conv-2, Conv-4 and Conv-6. `max_pool` takes the
maximum of the four integer convolution sums of a 2x2 window. The sums arrive
on consecutive sub-pixel iterations of the loop nest. Pooling happens before
normalisation, which matches the usual order conv → pool → BN → sign of this
kind of network.

`batch_norm` computes k·x + h in 33 bits and outputs 1 (meaning +1) when the
result is ≥ 0. k and h are signed 16-bit integers per output channel, folded by
the host from the trained parameters:

    γ(x - μ)/σ + β ≥ 0   ⇔   k·x + h ≥ 0   with k = S·γ/σ,  h = S·(β - γμ/σ)

Here S > 0 is any scale that keeps k and h inside 16 bits. A negative γ gives a
negative k, and the test-bench exercises that case. The convolution has no
bias; a bias can be folded into h.

## Running the CIFAR-10 network

The host runs the six layers like this:

| layer | input | calls | weight words per call | run cycles |
|---|---|---|---|---|
| Conv-1 | 3x32x32 image | 1 | 128 | 131,078 |
| Conv-2 + pool | 128x32x32 | 1 | 256 | 262,150 |
| Conv-3 | 128x16x16 | 1 | 512 | 131,078 |
| Conv-4 + pool | 256x16x16 | 1 | 1024 | 262,150 |
| Conv-5 | 256x8x8 | 2 × 256 channels | 1024 | 2 × 65,542 |
| Conv-6 + pool | 512x8x8 | 4 × 128 channels | 1024 | 4 × 65,542 |

The total is 1,179,708 cycles per image, not counting loads. At 100 MHz that
is about 11.8 ms.

The published FPGA accelerator takes 0.65 ms per image. It must therefore work
on many more channels or filters in parallel than this design's 64 input
channels against one output channel. Its parallelism is not published, so this
design makes no attempt to match the figure.

Between the calls of a split layer, the destination buffer keeps the channel
groups already written. Each call writes only its own groups.

Other networks fit if they meet all of these limits:
* every map fits in 9 × 256 words per buffer, i.e. ceil(H/3)·ceil(W/3)·C/64 ≤ 256;
* channels are multiples of 64 and at most 960 (G ≤ 15);
* maps are at most 63 pixels on a side;
* filters are 3x3.

The SVHN and MNIST networks and the deeper 8-layer CIFAR-10 variant of the
same study fit, and all three are simulated end to end:

| network | layers | run cycles |
|---|---|---|
| SVHN | 3x32x32 → 64-64-P-128-128-P-256-256-P | 327,716 |
| MNIST | 28x28 → 64-64-P-128-128-P-256-256-P | 237,604 |
| deeper CIFAR-10 | 3x32x32 → 128-128-P-256-256-P-512-512-P-512-512-P | 1,310,828 |

MNIST's single grey channel is loaded as a three-channel image with two zero
channels. Its last pooling turns a 7x7 map into 3x3; the odd row and column
are dropped. A
variant with 256 channels at 32x32 does not fit, and neither does one with 5x5
filters.

## Sizes and defaults

| item | value | origin |
|---|---|---|
| filter | 3x3, rank one, 5-bit code | published |
| image | 3x32x32, signed 8-bit pixels | size published, format chosen |
| lanes (input channels per cycle) | 64 | chosen |
| convolution sum | 16-bit signed | chosen |
| batch norm | 16-bit k and h | chosen |
| feature buffers | 2 × 9 banks × 256 × 64 bits | chosen (fits Conv-1's output) |
| image RAM | 9 × 128 × 24 bits | chosen |
| weight RAM | 1024 × 320 bits (64 codes per word) | chosen |
| batch-norm RAM | 512 × 32 bits | chosen (512 = widest layer) |
| streams | 64-bit valid/ready | chosen |

Total on-chip memory is 666,624 bits. After synthesis the logic is about 4,100
cells and 800 flip-flops.

The clock and reset are not published. Every register with a reset uses the
active-low asynchronous `rst_n`, and RAM contents are not reset.

## Where this design departs from, or adds to, the published one

* **Order of the two passes.** One part of the text describes a row-wise pass
  followed by a column-wise pass. The hardware description says vertical 3x1,
  then horizontal 1x3. The second is used. Both give the same result.
* **Naming.** The binary unit keeps the name of the published "Conv2-5"
  complex. It computes all five binary layers (Conv-2 to Conv-6).
* **Invented here.** The code order, the bit convention, the 64-lane
  parallelism, the nine-bank window RAM, padding by zeros, the pixel format,
  the 16-bit widths, the folded batch norm, the call set and stream formats,
  and all memory sizes.
* **Not included.** The host processor and the off-chip memory with its data
  movers. Here they are represented only by the two streams, which a DMA
  engine would drive.
* **Speed.** The design matches the published accelerator in function, not in
  speed (see above).

## Verification

Every module has a self-checking test-bench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` at the end and stops itself after a fixed
number of cycles.

| test-bench | what it checks |
|---|---|
| `tb_filter_decoder` | all 32 codes against a filter table rebuilt from the code rule; v[0] = +1; all 32 filters distinct |
| `tb_sep_conv_bin` | random windows, codes, masks and group counts against a direct 9-tap 2D convolution |
| `tb_sep_conv_fix` | the same for 8-bit pixels |
| `tb_window_ram` | every tap of every window of several map shapes, including odd ones such as 5x7 and 1x1 |
| `tb_max_pool`, `tb_batch_norm`, `tb_sdp_ram` | random stimulus against simple models |
| `tb_accel_ctrl` | the controller with real RAMs and a modelled datapath: exact issue sequence, pipeline flags, written words, cycle counts, loads and drain |
| `tb_bcnn_sf_accel` | end to end on a small six-layer network (8x8 image, 64-192 channels), with split layers, random stream stalls and negative scales |
| `tb_bcnn_sf_full` | end to end on the full CIFAR-10 network at the top's default parameters |
| `tb_bcnn_workloads` | end to end on the SVHN, MNIST and deeper CIFAR-10 networks, side by side |

The end-to-end runs (`tb_bcnn_net`, wrapped by the last three) act as the host:
* They generate a random image, codes and batch-norm constants.
* They compute every layer with plain 2D convolutions, pooling and thresholds.
* They compare every drained word.
* They check the cycle count of every run call.
* They count each mechanism: Conv-1 and binary calls, pooled and unpooled
  calls, split layers, input stalls, output back-pressure and negative scales.
  A mechanism that never occurs counts as a failure.

The full run compares all 4,480 output words of the six layers and takes a few
seconds.

Simulation with Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
        rtl/bcnn_pkg.sv tb/tb_ref_pkg.sv tb/tb_bcnn_sf_full.sv \
        --top-module tb_bcnn_sf_full
    ./obj_dir/Vtb_bcnn_sf_full

For another test-bench, replace the file and top name.

## Files

* `rtl/bcnn_pkg.sv`: constants, the call descriptor and the code types.
* `rtl/bcnn_sf_accel.sv`: the top level.
* `rtl/accel_ctrl.sv`: the controller.
* `rtl/sep_conv_bin.sv`, `rtl/sep_conv_fix.sv`, `rtl/filter_decoder.sv`: the
  datapath.
* `rtl/max_pool.sv`, `rtl/batch_norm.sv`: pooling and batch norm.
* `rtl/window_ram.sv`, `rtl/sdp_ram.sv`: the memories.
* `tb/tb_ref_pkg.sv`: the reference filter table.
* `tb/tb_bcnn_net.sv`: the end-to-end host model.
* `tb/tb_*.sv`: the other test-benches.
