# Sparse-pixel CNN inference with a fixed pixel budget

Some detector images are almost empty. A particle track lights up a few dozen pixels out of
thousands, and a standard convolution still spends its time on every empty pixel.
Standard streaming FPGA implementations need at least one clock per pixel. This design takes a
different route. It picks out a fixed number `N_MAX` of *active* pixels (channel 0 above a
threshold) and works only on those, in small arrays that can be processed fully in parallel.
Because the number of slots is fixed, the clock-cycle count is the same for every image:
sparse images and busy images take exactly as long. An image with more than `N_MAX` active pixels
is truncated. One with fewer is padded with invalid slots.

The RTL here is a complete classifier for 63x63 single-channel images with a budget of 20
pixels and 8-bit fixed-point arithmetic. That is the configuration of a neutrino-detection
task on downsampled liquid-argon TPC images. With the default parameters it produces a result
30 cycles after it takes an image, and it takes a new image every 21 cycles.

The method is the SparsePixels sparse-convolution scheme (Tsoi, Rankin, Loncar, Harris).
The layer algorithms follow the published ones. The network shape, the arithmetic rules, the
interfaces and the cycle-level timing are choices made for this RTL. They are marked as such
below.

## The sparse representation

Every layer after the first passes on one frame of `N_MAX` slots:

| array | shape | contents |
|---|---|---|
| feature array | `[N_MAX][C]` signed `DW`-bit | all channels of the pixel held in the slot |
| hash array | `out_h[N_MAX]`, `out_w[N_MAX]`, `COORD_W` bits each | 1-based row and column of that pixel |

Coordinates start at 1, so the value 0 is free to mark an invalid slot. A padded slot has
coordinates (0,0) and zero features. Slots are filled in row-major order of the original
image: slot 0 holds the top-left-most active pixel.

The frame moves between layers as plain arrays plus a one-cycle `valid` strobe. Each layer
registers its result when the strobe arrives and holds it until the next one. There is no
back-pressure: every layer after the input reduction finishes in one cycle.

## Finding the active pixels: `sparse_input_reduce` and `active_reduce_tree`

Writing active pixels into "the next free slot" while scanning would make each write address
depend on all earlier pixels, a long serial chain. Instead, each slot is filled by one pass of a
fixed-shape reduction tree over the whole image:

1. Each leaf `j` is one pixel. It is *active* if `img[j][0] > threshold` and it was not taken
   in an earlier pass.
2. The tree (`active_reduce_tree`, a recursive module) splits its `N` leaves into a left part
   of `2^floor(log2(N-1))` leaves and a right part holding the rest, and reduces each part the
   same way down to pairs and single leaves. A node returns the left result if the left result
   is active, otherwise the right one, otherwise "none". The root therefore gives the index of
   the leftmost active pixel. The tree is `ceil(log2(H*W))` nodes deep: 12 for 63x63.
3. The picked pixel's features and its (row, column) are written to the current slot, and
   the pixel is marked taken. The next pass then finds the next active pixel.
4. After `N_MAX` passes the frame is complete. A pass that finds nothing writes a padded slot.

This RTL makes one pass per clock, so the layer takes `N_MAX` cycles after the image is
captured. The image comes in whole, over a parallel port, with a valid/ready handshake. It is
copied into an internal register, so the port is free again as soon as the image is taken.
Each tree node carries an activity bit, the index and all channels of the pixel it has
chosen, so the root delivers the picked pixel's features directly. A decode of the index
sets that pixel's `taken` bit.

The published scheme masks a taken pixel by setting its value to zero. Here a separate
`taken` bit does this. The result is the same for any threshold of zero or more, and it is
also correct for a negative threshold.

## Convolution by offset lookup: `sparse_conv`

The convolution is *sparsity preserving*. An output is computed only at the active pixels, and
only active pixels feed it, so the hash array passes through unchanged. For output slot `po`,
filter `co` and every input slot `pi`:

```
dh = h[po] - h[pi];  dw = w[po] - w[pi];  R = (K-1)/2
if |dh| <= R and |dw| <= R:
    pos  = (R - dh)*K + (R - dw)              // kernel position, row-major
    acc += sum_ci weight[pos][co][ci] * feat[pi][ci]
out[po][co] = padded(po) ? 0 : sat((acc + bias[co] << FRAC) >>> FRAC)
```

No loop runs over the `K*K` kernel positions. Each pair of slots either falls inside the field
or adds nothing, so the work is `N*N*CIN*COUT` multiplies whatever `K` is. With `pos` defined
this way, the result equals an ordinary same-padded, stride-1 convolution evaluated at the
kept pixels, with all other pixels treated as zero. The testbench checks it against exactly
that dense formulation. All pairs are computed in parallel, and the result is registered once.

## Activation, pooling and flattening

* `sparse_relu`: `max(x, 0)` on every element of the feature array, in one cycle.
* `sparse_avgpool`: `P x P` average pooling with stride `P`. Coordinates become
  `floor((h-1)/P)+1`, and (0,0) stays (0,0). For each slot, the features of every slot that
  lands in the same pool are summed and divided by `P*P`. Absent pixels count as zero, and the
  division truncates towards zero. As in the published algorithm, the first slot of a pool
  collects the pool, and later slots of the same pool are left with zero features.
  **Departure:** those later slots also get the invalid coordinates (0,0). The published
  algorithm leaves them at the pooled coordinates. Then the next convolution would compute
  the same pixel twice, and the flattening (last writer wins) would overwrite the pooled
  value with zero. Invalidating them keeps the frame free of duplicates.
* `sparse_flatten`: starts from an all-zero `H*W*C` vector (channel-last, row-major) and
  writes each valid slot's channels at `C*((h-1)*W + (w-1)) + c`. Invalid slots write nothing.
* `dense_layer`: a conventional fully connected layer, all products in parallel, with an
  optional ReLU. The MLP classifier uses it twice.

## The network and its numbers

`sparse_cnn_top` chains the layers:

```
image -> input reduction -> conv(3x3, 3 filters) -> ReLU -> avgpool(4)
      -> conv(3x3, 3 filters) -> ReLU -> avgpool(4) -> flatten(4x4x3 = 48)
      -> dense(64) + ReLU -> dense(1) -> logit
```

The published model family is: two conv+ReLU blocks, average pooling, flattening, and a
2-layer MLP of about 4k parameters. It was run with pixel budgets of 8/12/16/20 and with 8 or
16 bits. The exact layer sizes were not available, so the ones above are this design's choice.
It has 3 filters in the first convolution, 3x3 kernels, pool size 4 twice and 64 hidden units,
about 3.4k parameters in total. All of them are constants in `rtl/sparsepixels_pkg.sv` and
parameters of the top.

| constant | default | origin |
|---|---|---|
| `IMG_H x IMG_W x IMG_C` | 63 x 63 x 1 | neutrino task input size |
| `N_ACTIVE_MAX` | 20 | largest published budget ("sparse-large") |
| `DATA_W` | 8 | 8-bit model |
| `FRAC_W` | 5 | own choice (values in [-4, 4)) |
| `K1, C1, POOL1` | 3, 3, 4 | own choice; 3 filters as in the published conv illustration |
| `K2, C2, POOL2` | 3, 3, 4 | own choice |
| `HIDDEN, N_OUT` | 64, 1 | own choice; one logit for a two-class task |

**Arithmetic** (own choice): every stored value is a signed `DATA_W`-bit number with `FRAC_W`
fractional bits. Products are exact. The bias is aligned to the products before it is added.
The sum is shifted back by `FRAC_W` with truncation towards minus infinity and saturated to
`DATA_W` bits. There is no output sigmoid: the top emits the logit.

**Timing** (defaults):

| stage | cycles |
|---|---|
| input reduction (capture + `N_MAX` passes) | 21 |
| conv1, relu1, pool1, conv2, relu2, pool2, flatten, dense1, dense2 | 1 each |
| latency, accepting edge to `out_valid` | `N_MAX + 10` = 30 |
| initiation interval | `N_MAX + 1` = 21 |

The initiation interval equals the input reduction's latency, as in the published design:
the image must stay in the reduction until its last pass. The later layers never stall. The
published HLS build of this task reports 133 cycles of latency and an initiation interval of
84 at 200 MHz. Its reduction tree takes 3-4 cycles per slot, where this RTL takes one.
Whether one tree pass over 3969 leaves closes timing at 200 MHz has not been checked: no
timing analysis was run. If it does not, registers would have to be added inside the tree.

## Interfaces

`sparse_cnn_top` ports (all widths `DW` unless stated):

| port | dir | shape | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `in_valid` / `in_ready` | in / out | 1 | image handshake; image taken on `in_valid && in_ready` |
| `in_img` | in | `[H*W][CI]` | image, row-major, channel-last |
| `threshold` | in | 1 value | pixel active if channel 0 `>` threshold |
| `conv1_w`, `conv1_b` | in | `[K*K][CA][CI]`, `[CA]` | kernel indexed `[kh*K+kw][cout][cin]` |
| `conv2_w`, `conv2_b` | in | `[K*K][CB][CA]`, `[CB]` | same layout |
| `fc1_w`, `fc1_b` | in | `[NH][NFLAT]`, `[NH]` | weight `[out][in]`, input is the flat vector |
| `fc2_w`, `fc2_b` | in | `[NO][NH]`, `[NO]` | |
| `out_valid` | out | 1 | one-cycle strobe |
| `out_logit` | out | `[NO]` | classifier output, held until the next result |

The weights are inputs. The surrounding system must hold them steady: registers loaded at
start-up, or a ROM holding the trained, quantised values. Each module's header comment gives
its own ports and timing.

## How far it has been checked

Each module has a self-checking testbench against a reference written independently of the
RTL:

| testbench | what it checks |
|---|---|
| `tb_sparse_input_reduce` | 7x9x2 image, budget 5: row-major order, padding, truncation, end pixels, negative threshold, latency and initiation interval |
| `tb_sparse_conv` | K=3 and K=5 against a dense-grid convolution; padded outputs; saturation |
| `tb_sparse_relu` | values, pass-through of coordinates, output hold |
| `tb_sparse_avgpool` | P=2 and P=3 against a dense pool grid, including merged slots |
| `tb_sparse_flatten` | every element of the flat vector, invalid slots ignored |
| `tb_dense_layer` | with and without ReLU, saturation |
| `tb_sparse_cnn_top` | whole network at 16x16, budget 6, 60 images back to back |
| `tb_sparse_cnn_top_full` | whole network at the default parameters, 30 images back to back |

The two network testbenches use a sequential model of all layers. They generate images of
short straight tracks plus sub-threshold noise. They check every output, the latency of every
image and the initiation interval. They also count how often padding, truncation, pooling
merges, convolution between neighbouring pixels, ReLU clipping and saturation occurred, and
fail if any of these never did.

What has not been done: no comparison against the original HLS implementation or against
trained weights. The tests use random weights, so classification accuracy is not exercised.
No FPGA timing closure or resource measurement either.

## Simulating and changing it

With Verilator 5 (two-state simulation; all state is reset):

```
verilator --binary --timing --assert --top-module tb_sparse_cnn_top_full \
    -y rtl -y tb +libext+.sv -Irtl rtl/sparsepixels_pkg.sv tb/tb_sparse_cnn_top_full.sv
./obj_dir/Vtb_sparse_cnn_top_full
```

Replace the module name to run any other testbench. Each prints
`TB_RESULT checks=N failures=M` and stops. The full-size test builds in well under a minute
and runs in seconds.

To build another configuration, override the parameters of `sparse_cnn_top`. Examples: a
smaller budget (`N_MAX` = 8, 12, 16), a 16-bit datapath (`DW`, `FRAC`), another image size
(`H`, `W`) or other class counts (`NO`). The flattened size follows from `H`, `W` and the pool
sizes. Resources grow with `N_MAX^2 * CIN * COUT` in the convolutions. The input reduction
grows with the image size, and its logic does not depend on `N_MAX`.
