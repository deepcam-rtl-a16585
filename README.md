# DeepCAM: dot products from Hamming distances in a content-addressable memory

A convolution or fully connected layer is a large number of dot products
between weight vectors and activation vectors. DeepCAM computes them
geometrically instead of by multiply-accumulate:

    x . y = ||x|| * ||y|| * cos(theta)

The angle is estimated from random projections. Take a random Gaussian
matrix C (n x k) and keep only the signs of the projection: `hash(x) =
sign(x C)`, a k-bit word. The fraction of bits in which two hashes differ
estimates theta / pi, so

    theta ~ pi * HD(hash(x), hash(y)) / k
    x . y ~ ||x|| * ||y|| * cos(pi * HD / k)

A Hamming distance is exactly what a CAM can measure for every stored word
in one search: each mismatching cell pulls the match line down, and the
time it takes is sensed. So one search gives the distance between a search
vector and all M stored vectors at once. The accelerator turns these
distances into dot products with a cheap cosine approximation and one
multiplication by the two norms.

The hash length k sets the accuracy. Some layers need 1024 bits, many do
well with 256. So the CAM word is built from four 256-bit chunks that can be
joined or cut apart per layer ("variable hash length").

This repository holds SystemVerilog for the digital part of such an
accelerator, and behavioural models where the original is analog. It is a
reconstruction from a published description. The choices made where that
description is silent are listed below.

## Contexts and number formats

Every vector, whether a weight kernel or an activation window, is stored as
a *context* (`deepcam_pkg::context_t`, 1032 bits):

| field  | bits | meaning |
|--------|------|---------|
| `norm` | 8    | L2 norm as an unsigned minifloat: 4-bit exponent (bias 7) and 4-bit mantissa. Exponent 0 is subnormal (`m/16 * 2^-6`). Range 2^-10 .. 496. |
| `hash` | 1024 | `sign(x C)`. Bit 256*c + i lies in chunk c. A layer of hash length 256*n uses chunks 0..n-1. |

Activations and dot products are `act_t`: 24-bit signed with 8 fraction bits,
saturating. The cosine is signed Q2.14. Batchnorm scales are Q8.8.

Weight contexts and the first layer's input contexts are made offline by
software. The contexts of later layers can be made on chip (see *On-chip
context generation*).

## The dynamic size CAM (`dyn_cam`, `cam_chunk`, `search_reg`)

```
             search data register (norm + 1024-bit hash)
               |          |          |          |
   row 0   [ chunk 3 ]=g2=[ chunk 2 ]=g1=[ chunk 1 ]=g0=[ chunk 0 ] --> sense --> hd[0]
   ...           256 b        256 b        256 b        256 b
   row M-1 [ chunk 3 ]=g2=[ chunk 2 ]=g1=[ chunk 1 ]=g0=[ chunk 0 ] --> sense --> hd[M-1]
```

- Each `cam_chunk` stores a 256-bit slice of every row. For a search it gives
  each row's number of mismatching bits. The real cell is a 2-FeFET CAM cell
  whose mismatches discharge the match line. Here the count is a population
  count of `stored XOR search`.
- Switch `g_i` joins chunk i to chunk i+1. It is closed when `nchunks > i+1`.
  A row's distance is the sum over chunk 0 and every chunk connected to it
  through closed switches.
- The search register also leaves the search lines of unused chunks
  undriven (`sl_en`), so an unused chunk cannot mismatch. In the real array
  this is where the energy saving of a short hash comes from.
- Timing: `srch_load` in cycle t, and all M distances are registered and
  valid (`hd_valid`) in cycle t+2, whatever M is. Rows are written one per
  cycle. Each row's norm is kept in a register beside it.

## From distance to activation (`postproc`)

Each of the M lanes computes, in the cycle `hd_valid` is high:

1. **Cosine** (`approx_cos`). With r = HD/k (so theta = pi*r):
   - `1 - r` for theta in (0, pi/3], and 1 at theta = 0;
   - `1.51 - 0.96*pi*r` for theta in (pi/3, pi/2];
   - `-cos(pi - theta)` beyond pi/2, that is the same two segments with
     HD replaced by k - HD.

   The segment is chosen by exact integer compares (`3*HD <= k`,
   `2*HD <= k`). r is formed once by a division in Q0.16. Note that the
   first two segments do not meet: at pi/3 the first gives 0.667 and the
   second 0.505. That is the approximation as specified, and it is kept.
2. **Dot product** (`approx_dot`). The two 5-bit significands are multiplied
   with the cosine. The product is shifted by the sum of the exponents into
   `act_t`, rounding toward minus infinity.
3. **Batchnorm** (`batchnorm`). `y = gamma*x + beta`, with mean and variance
   folded offline. Can be bypassed.
4. **ReLU** (`relu`). Can be bypassed.

The lanes are registered and then sent one per cycle, row 0 first, through
**max pooling** (`max_pool`). Pooling takes the maximum of `pool_win`
consecutive values. The host must lay out the stored rows so that a pooling
window is contiguous. Batchnorm parameters come from a table of M entries.
Lane r uses entry r in weight-stationary dataflow, where rows are output
channels. It uses entry `search_index mod M` in activation-stationary
dataflow, where the searched vector is the channel.

## On-chip context generation (`act_ctx_gen`, `l2norm_unit`, `isqrt`, `crossbar_hash`)

Sending a layer's outputs back to a host to be hashed would cost the
communication the design tries to avoid. So a transformation unit turns
output activations into next-layer contexts:

- `vlen` consecutive activations of the output stream form one vector
  I1..In, with n = `XB_N` = 256 at most. Unused inputs are zero.
- **Norm:** one squarer per input, an adder tree, a sequential square root
  (2 bits per cycle), then rounding down to the minifloat, saturating at 496.
- **Hash:** a crossbar holds C as conductances. DACs drive the rows, each
  column's current is summed, and a sense amplifier per column outputs 1 if
  the sum is negative. No ADC is needed because only the sign matters.
  `crossbar_hash` is a behavioural model of this analog part: C is stored as
  4-bit signed levels, programmed one row per cycle, and evaluated in one
  cycle.
- The finished context is written into the buffer at `out_base`,
  `out_base+1`, and so on. From the last element to the context takes about
  33 cycles. The input stream is stalled meanwhile, and that stall
  propagates back through pooling to the lanes.

The unit takes the vector in stream order. It does not gather overlapping
convolution windows (im2col). A host, or a future address generator, must
arrange the activations so that each next-layer vector arrives contiguously.

## Running a tile (`controller`, `deepcam_top`)

One `start` runs one *tile* with the configuration `cfg_in`
(`deepcam_pkg::layer_cfg_t`):

| field | use |
|-------|-----|
| `df` | `DF_WEIGHT_STAT`: rows hold weights and activations are searched. `DF_ACT_STAT`: the reverse. |
| `nchunks` | hash length / 256, 1..4 |
| `n_rows`, `stat_base` | number of stationary contexts (1..M) and their buffer address |
| `n_search`, `strm_base` | number of searched contexts and their address |
| `bn_en`, `relu_en`, `pool_en`, `pool_win` | post-processing options |
| `xform_en`, `vlen`, `out_base` | send outputs to the context generator instead of `res_*` |

Sequence: load `n_rows` contexts into the CAM (one per cycle), then for each
searched context do fetch, search, and wait for post-processing to send its
lanes. Finally drain and pulse `done`. With no back-pressure a tile takes
about `n_rows + n_search * (n_rows + 5)` cycles. The search itself is
constant time. What grows with M is sending the lanes one per cycle.

Activation-stationary dataflow fills all rows even in layers with few
output channels. For example, 6 kernels against 784 windows use 6/64 rows
weight-stationary, but all 64 rows activation-stationary. That is why it is
the faster mode. Whole layers are split into tiles by the host. The host
also refills the buffer through `ext_wr_*`, and can read it back through
`ext_rd_*` (one cycle latency) while `busy` is low.

`deepcam_top` ports: `ext_wr_*` / `ext_rd_*` are the buffer's side towards
off-chip memory. `bn_wr_*` writes the batchnorm table, `prog_*` the
crossbar, and `res_valid/res_ready/res_data` carry the output activations.
Defaults: `ROWS` = 64 CAM rows, `DEPTH` = 512 buffer entries, `XB_N` = 256
crossbar inputs, `WB` = 4 weight bits, `WIN_W` = 4 (pooling windows up
to 15).

## What is modelled, not built

- **FeFET CAM cell, match line, transmission gates and time-domain sense
  amplifier.** These are analog. Their combined function, a per-row Hamming
  distance over the joined chunks, is computed digitally with one clocked
  stage. A silicon version would replace `cam_chunk` and the summation in
  `dyn_cam` with the array macro and its sense amplifiers. It would also
  need the sense amplifier's time-to-count conversion, which is not
  specified here.
- **Crossbar, DACs, op-amps** (`crossbar_hash`). A behavioural model. It is
  not meant for synthesis: its 256 x 1024 multiply-accumulate loop exceeds
  the unroll limits of synthesis tools.
- **Context & data buffer.** Written as a memory array. It would be an SRAM
  macro.
- **Software context generator and off-chip DRAM.** Not part of the RTL.

## Where this RTL departs from, or adds to, the original description

- All number formats are this design's: minifloat layout, `act_t`, Q2.14
  cosine, Q8.8 gamma. The description gives only "8-bit minifloat" for the
  norm.
- The dot-product formula is printed with squared norms, but everywhere else
  the magnitudes are L2 norms built with a square root. The RTL uses plain
  L2 norms.
- Pooling is max pooling over contiguous stream windows. Batchnorm comes
  before ReLU. The batchnorm indexing is a choice.
- The buffer organisation, the controller's sequence, the tile configuration
  and every handshake are inventions. The description shows these blocks
  only as boxes.
- Residual shortcut additions, im2col gathering and layer-level tiling are
  not described and not built.

## Sizes and workloads

Hash lengths of 256 to 1024 bits cover every layer of the four evaluated
networks: LeNet5, VGG11, VGG16 and ResNet18. A 64-row CAM processes any layer
in tiles of 64 vectors. The on-chip context generator limits next-layer
vectors to 256 elements. That covers LeNet5's conv2, FC4 and FC5 inputs
(150, 120, 84) but not FC3 (400), nor 3x3 kernels beyond 28 channels in the
VGG and ResNet networks. For those layers the contexts must come from
software, or the crossbar must be larger (`XB_N`). Row counts of 128 to 512
are a parameter change (`ROWS`).

## Verification

Every module has a self-checking testbench in `tb/`. Each compares against
reference arithmetic written independently in `tb/tb_ref_pkg.sv`: a
real-valued cosine, dot product and norm, and integer population counts and
column sums. Each prints `TB_RESULT checks=N failures=M`.

- `tb_deepcam_top` runs the whole accelerator at 8 rows, 64 entries and 16
  crossbar inputs. It covers both dataflows, all four hash lengths, all three
  cosine segments, batchnorm, ReLU clipping, pooling, result-port
  back-pressure, generator stalls and written-back contexts, and it fails if
  any of these never happened.
- `tb_deepcam_top_full` runs the same sequence with every parameter at its
  default: 64 rows, 512 entries, 256 crossbar inputs.

- `tb_lenet_conv1` runs the first convolution layer of LeNet5 at the
  default size: 6 kernels of 5x5 over a 32x32 image, 784 windows, hash
  length 256, activation-stationary, 13 tiles of up to 64 rows. The host
  part of the test makes the contexts. Every output matches the
  approximate dot product of its contexts. Against the exact convolution
  the outputs correlate at about 0.88 with these synthetic data. The
  spread comes from the 256-bit hash, the truncated 4-bit-mantissa norms
  and the cosine approximation.

Simulating with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_deepcam_top \
    rtl/deepcam_pkg.sv tb/tb_ref_pkg.sv $(ls rtl/*.sv | grep -v deepcam_pkg) \
    tb/tb_deepcam_top.sv -o sim
./obj_dir/sim
```

The package has to come first. `-Wno-fatal` keeps lint-style warnings from
stopping the build. The full-size test takes under a minute to build and run.
Any block testbench is built the same way with its own
`--top-module`. Lint with `verilator --lint-only -Wall rtl/deepcam_pkg.sv
rtl/*.sv --top-module deepcam_top`.

## Files

| file | block |
|------|-------|
| `rtl/deepcam_pkg.sv` | shared constants, `context_t`, `layer_cfg_t`, minifloat helpers |
| `rtl/deepcam_top.sv` | top level |
| `rtl/controller.sv` | tile sequencer |
| `rtl/ctx_buffer.sv` | context & data buffer |
| `rtl/dyn_cam.sv`, `rtl/cam_chunk.sv`, `rtl/search_reg.sv` | dynamic size CAM |
| `rtl/postproc.sv`, `rtl/approx_dot.sv`, `rtl/approx_cos.sv`, `rtl/batchnorm.sv`, `rtl/relu.sv`, `rtl/max_pool.sv` | post-processing |
| `rtl/act_ctx_gen.sv`, `rtl/l2norm_unit.sv`, `rtl/isqrt.sv`, `rtl/crossbar_hash.sv` | on-chip context generation |
