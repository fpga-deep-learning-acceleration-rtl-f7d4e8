# A window-pipelined convolution-layer accelerator

Most of the arithmetic of a convolutional neural network sits in its
convolution layers: every output value is a sum of `N x K x K` products over a
sliding window of the input. This design computes one such layer in hardware by
combining three kinds of parallelism:

* **inside the kernel** — the `K x K` products of one window and one channel are
  formed by `K*K` multipliers at once and summed by an addition tree;
* **across input channels** — `PN` input channels are convolved at the same
  time and their partial results added;
* **across output channels** — the same input windows are convolved with `PM`
  kernels at the same time.

On top of that the sequence of windows is **pipelined**: a window cache built
from two register arrays turns a stream of one pixel per clock into one
complete `K x K` window per clock, so the arithmetic never waits for data.

The design is written in SystemVerilog (IEEE 1800-2017), synthesizable, and
follows the structure of a published FPGA accelerator for a small MNIST
network (Cyclone V, 16-bit fixed point, 100 MHz). What the original describes —
the addition tree, the multiply-add tree, the window cache and the accumulator
scheme — is reproduced closely; how the blocks are sequenced, the buffer
organisation and all interface details are this implementation's own, and are
marked as such below and in each file's header.

## The network and the default configuration

The reference network classifies 28 x 28 grey-scale MNIST digits:

| layer | structure | parameters |
|---|---|---|
| convolution 1 | 15 kernels of 3 x 3, stride 1 | 150 = 15·(1·9) + 15 |
| pooling 1 | 2 x 2, stride 2 | – |
| convolution 2 | 20 kernels of 6 x 6, stride 1 | 10820 = 20·(15·36) + 20 |
| pooling 2 | 2 x 2, stride 2 | – |
| fully connected | 10 outputs | 3210 = 10·320 + 10 |

There are no activation functions. The feature maps are 28x28x1 → 26x26x15 →
13x13x15 → 8x8x20 → 4x4x20 = 320 values.

`conv_accel`'s default parameters are convolution layer 1: `K=3, H=W=28, S=1,
N=1, M=15`, computed fully in parallel (`PN=1, PM=15`, 135 multipliers). The
whole layer is one pass of 784 clocks. Layer 2 uses the same RTL with other
parameters (`K=6, H=W=13, N=15, M=20`); `tb_conv2_layer` runs it folded onto
`PN=5, PM=4` (720 multipliers, 15 passes). Pooling and the fully connected
layer are not part of this RTL: the source gives their sizes but neither the
pooling function nor any hardware for them.

## Block diagram

```
 fm_wr_* ──► feature_buffer ──PN pixels/clk──► window_buffer x PN ──PN windows/clk──┐
            (PN banks, N·H·W words)           (K·K + (K-1)(W-K) regs each)          │
                                                                                    ▼
 w_wr_*, b_wr_* ──► weight_buffer ──PM·PN kernels──────────────────────────────► pe_array
                    (M·N·K·K weights, M biases)                        PM x PN mac_tree
                                                                       + PM channel adder_trees
                                                                                    │ PM sums/clk
                                                                                    ▼
                                         out_data[PM] ◄── out_accumulator (partial sums + bias)
```

`conv_accel` holds the controller: it reads the feature buffer one pixel per
clock and tags each pixel with its pass; the tags travel alongside the data so
that the weight selection, the accumulator's first/last-group decisions and
the output channel number always match the window they belong to.

## The addition tree (`adder_tree`)

A conventional addition tree pads its `η` operands with zeros up to the next
power of two. For `η = 9` that means 16 leaves, 15 adders and 31 registers; for
`η = 144` (a 12 x 12 kernel) as many as for 256. The tree used here pads
nothing. Each layer adds its operands in pairs; if a layer has an odd count,
the last operand is not paired but simply registered into the next layer. A
layer of `n` operands thus feeds `ceil(n/2)` to the next, the tree uses exactly
`η-1` adders, and it has `ceil(log2 η)` adder layers — the same depth as the
padded tree.

For `η = 9`:

```
layer 1 (inputs)   9 registers  a0 a1 | a2 a3 | a4 a5 | a6 a7 | a8
layer 2            5 registers   s01    s23     s45     s67    a8   (a8 passed on)
layer 3            3 registers     s0123          s4567        a8
layer 4            2 registers          s01234567              a8
layer 5            1 register                 sum
```

8 adders, 20 registers, 4 adder clocks. Every layer is registered, so the tree
accepts a new operand set every clock. **Latency from the input port:
`1 + ceil(log2 η)` clocks** (5 for η = 9, 7 for η = 36).

All nodes are `ACC_W = 48` bits wide, sign-extended from the operands. This is
far more than needed (layer 2 sums 540 products of 32 bits: 42 bits), and keeps
every sum exact.

## The multiply-add tree (`mac_tree`) and the compute array (`pe_array`)

`mac_tree` is `K*K` signed 16 x 16 multipliers whose full 32-bit products are
the operands of an `adder_tree` with `η = K*K`. The products are combinational
and land in the tree's input register layer, so the latency is that of the tree.

`pe_array` instantiates `PM x PN` of them. Tree `(m, n)` multiplies the window of
input channel `n` with slice `n` of kernel `m`, giving `a_mn`; per output channel a
second `adder_tree` with `η = PN` sums `a_m0 … a_m(PN-1)`. **Latency:
`(1 + ceil(log2 K²)) + (1 + ceil(log2 PN))` clocks**, 6 for the defaults, 11 for
the layer-2 configuration. (The source draws the channel sum as a single adder;
using the same odd-pass-through tree for it is this design's choice.)

## The window cache (`window_buffer`)

This is the block that makes the design stream. One channel's feature map
arrives in raster order, one pixel per clock. Two register arrays hold
everything a window still needs:

* `WINDOW_BUFFER`, `K x K` registers: the current window;
* `SHIFT_BUFFER`, `K-1` rows of `W-K` registers: the rest of the previous
  `K-1` image rows.

On every pixel, all at once: the pixel enters column 1 of the bottom window
row; every window row shifts right by one; the last column of window rows
`2..K` moves into column 1 of the shift row behind it; every shift row shifts
right; the last register of each shift row moves into column 1 of the window
row above. Each row is therefore a chain of exactly `W` registers
(`K` in the window plus `W-K` in the shift buffer), and window row `r-1` always
holds the image row directly above window row `r`. Only `(K-1)·W + K` registers
are needed in total, and each pixel is read from the input buffer once.

Timing (pixels numbered from 1 within a frame):

* the first `Tu = (K-1)·W + K-1` pixels fill the cache — no window yet;
* pixel `Tu+1` completes window 1; each further pixel completes the next one;
* pixel `K·W` completes window `Wo`, the end of the first output row;
* the next `K-1` pixels start a new image row: the window straddles two rows
  and is flagged invalid;
* pixel `H·W` completes the last window `Ho·Wo`.

So one window leaves per clock except for `K-1` clocks per row, and a frame
takes exactly `H·W` clocks. The window registers need no clearing between
frames: everything is overwritten before the next valid window. Consecutive
frames — or consecutive passes over different channels — follow back to back.

The register array stores the newest pixel in column 0; `win[i*K+j]` is
re-ordered to image order (row `i`, column `j` of the window). The block also
counts rows and columns to produce `win_valid`, the window number `win_idx`
(raster order over the output) and `win_last`; these counters are this
design's addition. A stride `S > 1` is supported by marking only every `S`-th
window row and column valid (the reference network uses stride 1 only).

One departure: the original timing diagram shows a second start-up gap of
length `Tu` after pixel `K·W`. That contradicts its own statement that the last
window is complete at pixel `H·W`, which holds only with `K-1` invalid pixels per
row boundary. The RTL follows the statement and the arithmetic.

## Accumulation across input groups (`out_accumulator`)

When a layer has more input channels than the array computes at once
(`N > PN`), each output is the sum of `NG = N/PN` components, one per input
group, plus the bias: `O_m = Σ_g s_m,g + b_m`. Per output lane the
accumulator stores the first component, adds the later ones, and after the
last adds `b_m` and emits the result.

In the original scheme each lane is one register, which holds one window.
With the window pipeline, all `Ho·Wo` windows of one input group pass before
the next group starts, so each lane here keeps one partial sum per window
position: a `G = Ho·Wo`-word memory indexed by the window number. A window
position comes back only a whole pass (`H·W` clocks) later, so the
read-add-write needs no forwarding. With one input group (`NG = 1`, the default)
the memory is never written and synthesis removes it.

## Passes and the controller (`conv_accel`)

A layer is computed in `MG·NG` passes, `MG = M/PM`, `NG = N/PN`; output group
outer, input group inner. (`N` must be a multiple of `PN` and `M` of `PM`;
elaboration stops otherwise.) Each pass streams the `H·W` pixels of `PN`
channels, one per clock, with no gap between passes. The weight buffer presents
the `PM x PN` kernels of the pass tagged to the window currently entering the
array, so passes overlap in the pipeline without interference.

Clock count: counting from the clock that samples `start`, the result of the
window whose newest pixel is number `t` (from 0) of pass `q` (from 0) appears
after `3 + L_pe + q·H·W + t` clocks, where `L_pe` is the `pe_array` latency
(one clock for the buffer read, one for the window register, one for the
accumulator). The last result comes with `done`. For the defaults: `3 + 6 + 783
= 792` clocks for the whole layer, 676 results of 15 channels each.

## Buffers

`feature_buffer` holds `N` channels of `H·W` 16-bit words in `PN` banks
(channel `c` in bank `c mod PN`), each a one-write, one-read memory with a
registered read — the shape of an FPGA block RAM. `weight_buffer` keeps the
weights in registers because `PM·PN·K²` of them are needed every clock; biases
are 32-bit words in the product format. Both are loaded through plain write
ports while the accelerator is idle; how they are filled from external memory
(DDR3 on the original board) is outside this RTL. Assertions in `conv_accel`
flag a `start` while busy and a buffer write while busy.

## Interface of `conv_accel`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; synchronous active-low reset |
| `fm_wr_en, fm_wr_ch, fm_wr_addr, fm_wr_data` | in | write one input word: channel, pixel `row·W+col` |
| `w_wr_en, w_wr_m, w_wr_n, w_wr_k, w_wr_data` | in | write weight of kernel `m`, channel `n`, position `k = i·K+j` |
| `b_wr_en, b_wr_m, b_wr_data` | in | write 32-bit bias of kernel `m` |
| `start` | in | one-clock pulse: compute the layer |
| `busy`, `done` | out | layer in progress; pulse with the last result |
| `out_valid` | out | `out_data` holds results |
| `out_ch_base` | out | output channel of lane 0 (`out_data[p]` is channel `out_ch_base+p`) |
| `out_idx` | out | output position `i'·Wo + j'` |
| `out_data[PM]` | out | 48-bit results, full precision, product format |

Values are two's complement. The position of the binary point is up to the
user: inputs and weights in the same Q format give results with twice its
fraction bits. Rescaling and saturation back to 16 bits are not done here.

## Numbers against the original

The original reports 342 DSP blocks and 317.86 GOPS at 100 MHz, i.e. about
1590 multiply-accumulates per clock; it gives no per-layer parallelism, so the
defaults here cannot be checked against that figure. The default build does 135
multiply-accumulates per clock (27 GOPS peak at 100 MHz); layer 2 at
`PN=5, PM=4` does 720. Area, power and speed-ups against CPU/GPU are not
reproduced.

## Where this RTL departs from or adds to the source

* Channel parallelism `PN`, `PM`, the pass order, the controller, the handshake
  and the output stream format are not specified by the source.
* The per-window partial-sum memory in `out_accumulator` generalises the one
  register per lane of the original accumulator.
* Invalid windows at row boundaries are `K-1` pixels long (see the window cache
  section), not `Tu` as one diagram suggests.
* Stride > 1 support, the window counters, banking of the input buffer and the
  register-file weight buffer are additions.
* Pooling, the fully connected layer, the DDR3 interface and clock generation
  are not included.

## Files

`rtl/`: `cnn_pkg.sv` (widths, tree helper functions), `adder_tree.sv`,
`mac_tree.sv`, `window_buffer.sv`, `feature_buffer.sv`, `weight_buffer.sv`,
`pe_array.sv`, `out_accumulator.sv`, `conv_accel.sv` (top).

`tb/`: one self-checking testbench per module (`tb_<module>.sv`), each ending
with a line `TB_RESULT checks=<n> failures=<n>`:

* `tb_conv_accel` — two reduced configurations end to end: 4 passes with
  input-group accumulation and an output-group switch, and a stride-2 layer;
  counts that each mechanism happened.
* `tb_conv_accel_full` — default parameters, layer 1 of the network, all
  10140 results.
* `tb_conv2_layer` — layer 2 of the network on a 5 x 4 channel array.
* `conv_harness.sv` — shared stimulus and reference model used by the two
  above: random data, a direct 64-bit convolution, value, count and clock-count
  checks.

Simulate with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/cnn_pkg.sv tb/tb_conv_accel.sv \
          --top-module tb_conv_accel
./obj_dir/Vtb_conv_accel
```

Lint a module with `verilator --lint-only -Wall -Irtl rtl/cnn_pkg.sv rtl/<module>.sv`.
To change the layer, override the parameters of `conv_accel`; everything else
(tree depths, latencies, buffer sizes, index widths) follows from them.
