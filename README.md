# Residual-binarized CNN accelerator (Arch-2, CIFAR-10 / SVHN)

A binary neural network replaces multiply-accumulate with XNOR and popcount.
That makes it cheap, but a single sign bit per feature costs accuracy.
*Residual binarization* keeps the XNOR datapath and recovers accuracy with
more bits per feature. A feature `x` is encoded as M sign bits `b_1..b_M`:

```
r_1 = x
b_i = (r_i >= 0)                       (1 means +1, 0 means -1)
r_{i+1} = r_i - sign(b_i) * gamma_i
x ~= sum_i sign(b_i) * gamma_i
```

`gamma_1 > gamma_2 > ...` are scaling factors learned per layer. A dot product
with a binary weight vector `w` splits into M ordinary binary dot products, one
per level:

```
x . w ~= sum_i gamma_i * (s_i . w)      with s_i in {-1,+1}^N
```

The hardware therefore stays a binary engine. Each PE gets M accumulators and
one small multiply-accumulate at the end. The number of levels M is a run-time
input (1..3). Run time grows linearly with M, and the same circuit trades speed
for accuracy.

This RTL implements the whole accelerator for the nine-layer "Arch-2" network
(six 3x3 convolutions, two 2x2 max pools, three fully connected layers). Every
layer runs concurrently as one stage of a streaming pipeline.

## Feature codes

Every feature travels between layers as an `M_MAX = 3` bit code.

- Bit 2 is `b_1`, the sign of the feature itself.
- Bits 1 and 0 are `b_2` and `b_3`.
- Levels that are not active are 0.
- A pixel packs channel `c` at bits `[c*3 +: 3]`.

With `b_1` as the MSB, comparing two codes as unsigned numbers orders the
values they stand for. This holds as long as each `gamma_i` is larger than the
sum of the later ones, which trained factors normally satisfy. Max pooling
relies on it.

All fixed-point numbers (gammas, thresholds, accumulated sums) are 24-bit two's
complement (`T = 24`) on one common scale chosen by whoever prepares the
parameters. The datapath does no shifting. The batch-norm scale must be folded
into `gamma_in` and the batch-norm offset into the threshold.

## Network and pipeline

`rebnet_cnv` chains nine `rb_layer` stages. Each stage is a sliding window unit
(`swu`), a matrix-vector-threshold unit (`mvtu`) and, where the network pools,
a `maxpool`. Convolutions are unpadded and use stride 1.

| Layer | Kind | In ch | Out ch | Map in -> out | P (PEs) | S (SIMD) | NF | SF | Cycles/image at M=1 |
|---|---|---|---|---|---|---|---|---|---|
| L0 | conv 3x3 | 3 | 64 | 32 -> 30 | 16 | 3 | 4 | 9 | 32,400 |
| L1 | conv 3x3 + pool | 64 | 64 | 30 -> 28 -> 14 | 32 | 32 | 2 | 18 | 28,224 |
| L2 | conv 3x3 | 64 | 128 | 14 -> 12 | 16 | 32 | 8 | 18 | 20,736 |
| L3 | conv 3x3 + pool | 128 | 128 | 12 -> 10 -> 5 | 16 | 32 | 8 | 36 | 28,800 |
| L4 | conv 3x3 | 128 | 256 | 5 -> 3 | 4 | 32 | 64 | 36 | 20,736 |
| L5 | conv 3x3 | 256 | 256 | 3 -> 1 | 1 | 32 | 256 | 72 | 18,432 |
| L6 | fc | 256 | 512 | – | 1 | 4 | 512 | 64 | 32,768 |
| L7 | fc | 512 | 512 | – | 1 | 8 | 512 | 64 | 32,768 |
| L8 | fc | 512 | 10 | – | 4 | 1 | 3 | 512 | 1,536 |

- `SF = K*K*CI / S` is the number of S-bit words per input vector.
- `NF = ceil(CO / P)` is the number of neuron folds.
- One output pixel costs `NF*SF*M` cycles.

The stream rate is set by the slowest stage: about 32.8k cycles per image at
M = 1. At 200 MHz that is about 6,000 images/s at M = 1, 3,000 at M = 2 and
2,000 at M = 3.

Fully connected layers reuse the same stage with `K = 1` on a 1x1 "image". The
last layer, L8, has no binarization. It emits its ten thresholded 24-bit sums
as class scores, and the host takes the largest.

## Processing element (`rb_pe`)

The PE is where residual binarization enters the datapath. Per cycle it
receives one S-bit word: one level `i` of one chunk `j` of the input vector.

1. **XNOR and popcount.** The PE reads the weight word at address
   `nf*SF + j` from its weight memory. It XNORs that word with the input word
   and counts the ones, `p`.
2. **Level accumulators.** `2p - S` is the +/-1 dot product of this chunk. It
   is added to accumulator number `level`. The word's `clear` flag restarts
   that accumulator, so no separate clearing cycle is needed.
3. **Combine the levels.** After the word flagged `last`, the next cycle
   computes `sum_i gamma_in[i] * acc[i]` over the active levels. Each product
   is 2T bits wide and truncated to T bits.
4. **Threshold.** The PE subtracts the neuron's threshold. This is batch
   normalisation with the scale already folded into `gamma_in`.
5. **Encode.** `rb_encoder` turns the result into the next layer's M-bit code,
   using the next layer's factors `gamma_out`.

`out_valid` is high for exactly one cycle, one cycle after `last`. The
accumulators can already take the next vector's first words in that cycle, so
a PE never stalls by itself.

The words of one chunk arrive level after level (`j=0: b_1, b_2, b_3; j=1:
...`). The weight word for chunk `j` is therefore the same for M cycles in a
row, and M only multiplies the time, not the hardware. The only parts that
depend on M are the M accumulators, the small MAC and the encoder.

The encoder (`rb_encoder`) is combinational and unrolls the loop at the top of
this page: M comparisons with subtracters in between.

## Folding and buffering in the MVTU (`mvtu`)

The MVTU holds P PEs. Together they compute P output neurons at a time (one
*neuron fold*). A whole output vector takes NF folds of `SF*M` cycles each.

- **Input vector buffer.** During fold 0 the words come straight from the
  input stream and are also written into the buffer, at index `j*M_MAX + level`.
  Folds 1..NF-1 replay the vector from the buffer. The input stream is
  therefore ready only during fold 0.
- **Output vector buffer.** The PEs' results of each fold are written into the
  output buffer at the neurons `nf*P + p`. Results for neurons beyond `CO`
  (10 outputs on 4 PEs in L8) are discarded. The completed pixel is held until
  the next stage accepts it.
- **Stall rule.** The last word of any fold waits while the output buffer
  holds a pixel that has not been accepted yet, because the fold's results
  would overwrite it. It also waits while the previous vector's last fold is
  one cycle from landing there. Nothing else in the unit ever stops.
- **Per-layer factors.** `gamma_in` and `gamma_out` are per-layer registers
  shared by all PEs.

## Sliding window unit (`swu`)

The SWU turns a stream of pixels into the word stream of one layer.

- **Window order.** Each KxK window is flattened with element index
  `(ky*K + kx)*CI + c`. It is cut into SF chunks of S bits, and each chunk is
  sent as M words, one per level.
- **Row ring.** The SWU stores `K + STRIDE` image rows in a ring. While the
  K rows of the current output row are read, the next STRIDE rows are
  written, so loading overlaps with emitting.
- **Row count.** A signed count `avail` tracks how many rows are present from
  the current top row onward. Windows are emitted while `avail >= K`, and
  pixels are accepted while `avail < K + STRIDE`.
- **End of image.** The top row jumps past the rows below the last window.
  Those rows are written but never read. The next image follows without a gap.

A ring of exactly K rows would make loading and emitting alternate. In this
pipeline that measured 59k cycles per image at M = 1 instead of 33.9k, because
L1's SWU would hold up L0 at every row.

## Max pooling (`maxpool`)

The pooling stage is 2x2 with stride 2. It keeps, per channel, the unsigned
maximum of the codes in the window (an OR when M = 1).

- A buffer of `IFM/2` partial maxima holds the first row of each row pair.
- The pooled pixel is registered on the pixel that completes its window.
- Odd last rows or columns are dropped.

## Loading parameters

The top has one write port. Each write goes to layer `cfg_layer`:

| `cfg_sel` | Target | `cfg_pe` | `cfg_addr` | `cfg_data` |
|---|---|---|---|---|
| `CFG_WEIGHT` | weight word | PE p | `nf*SF + j` | S bits; bit b is the weight of element `j*S + b` |
| `CFG_THRESHOLD` | threshold | PE p | `nf` | T bits, signed |
| `CFG_GAMMA_IN` | gamma of this layer's input | – | level i | T bits |
| `CFG_GAMMA_OUT` | gamma used to encode this layer's output | – | level i | T bits |

- Neuron `n` lives in PE `n % P`, fold `n / P`.
- A weight is 1 for +1 and 0 for -1.
- The data bus is 64 bits (`CFG_W`), enough for the widest SIMD word used
  anywhere in the library blocks.
- `levels` may only change while the pipeline is empty.

Input pixels are 3 channels of 3-bit codes. The first-layer image must
therefore be residual-encoded before it enters, for example with the first
layer's own gammas.

## Measured behaviour

The measurements below come from the full-size end-to-end simulation at default
parameters, with random parameters and image.

- **Single-image latency.** 139,347 / 278,567 / 417,783 cycles at M = 1 / 2 / 3
  (after parameter loading). This is linear in M.
- **Back-to-back stream at M = 1.** One result every 33,916 cycles, or 5,896
  images/s at 200 MHz.
- **Synthesis size (generic yosys).** About 1.68 Mbit of memory (weights, line
  buffers and vector buffers), about 8.8k flip-flops and about 36k other cells.

The same blocks, built as the four-layer MNIST network (784 inputs padded to
832, 256-256-256-10), run one result every 208 / 416 / 624 cycles at M = 1 / 2 /
3. That is 9.6e5 / 4.8e5 / 3.2e5 samples/s at 200 MHz.

## Departures and own choices

- **Unpadded convolutions.** The map sizes follow from this (32 -> 30 -> 28 ->
  14 -> ...).
- **Input image.** It enters already residual-encoded. There is no fixed-point
  first layer.
- **No softmax.** The ten raw scores are the output.
- **Fixed point.** There is one common fixed-point scale with no shifts. The
  MAC keeps the low T bits of each product. The host must pick scales so that
  nothing overflows.
- **Pooling on codes.** Comparing codes equals comparing values only if
  `gamma_i > gamma_{i+1} + ... + gamma_M`.
- **SWU buffer.** The SWU keeps `K + STRIDE` rows rather than K (see above).
- **Handshakes and loading.** Valid/ready handshakes everywhere, the word order
  (chunk-major, levels inner) and the parameter-load port are design choices.
- **Not built.** The ImageNet network (11x11 stride-4 and 5x5 convolutions,
  3x3 pooling, 4096-wide layers, about 58 Mbit of weights) and any training
  support are out of scope. The top is fixed to Arch-2. The library blocks are
  parameterised and also build the MNIST network.

## Files

| File | Contents |
|---|---|
| `rtl/rebnet_pkg.sv` | widths, load-port enum, Arch-2 layer table |
| `rtl/rb_encoder.sv` | residual encoder |
| `rtl/rb_pe.sv` | processing element |
| `rtl/mvtu.sv` | matrix-vector-threshold unit |
| `rtl/swu.sv` | sliding window unit |
| `rtl/maxpool.sv` | 2x2 max pooling |
| `rtl/rb_layer.sv` | one layer: SWU -> MVTU -> optional pool |
| `rtl/rebnet_cnv.sv` | the Arch-2 accelerator (top) |
| `tb/tb_*.sv` | self-checking testbenches, one per block |
| `tb/swu_check.sv` | SWU checker used by `tb_swu` |
| `tb/tb_arch1_mnist.sv` | MNIST network built from the same blocks |

Every testbench prints `TB_RESULT checks=N failures=F` and stops.
`tb_rebnet_cnv` does the following:

- It loads all parameters and runs one image at M = 3, 1 and 2, with random
  input gaps and output back-pressure.
- It streams three images back to back.
- It compares every score with a plain-loop model of the network.
- It checks that latency scales with M and that the stream rate is correct.
- It counts input stalls, output stalls, pool outputs, buffer replays, level
  switches and discarded spare PE results, and fails if any of them never
  happened.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_rebnet_cnv \
  rtl/rebnet_pkg.sv rtl/rb_encoder.sv rtl/rb_pe.sv rtl/mvtu.sv rtl/swu.sv \
  rtl/maxpool.sv rtl/rb_layer.sv rtl/rebnet_cnv.sv tb/tb_rebnet_cnv.sv
./obj_dir/Vtb_rebnet_cnv
```

- The full-size top test runs in about 1.5 minutes. Adding `-O2` helps.
- For a block test, replace the top module and the testbench file. `tb_swu`
  also needs `tb/swu_check.sv`.
- The testbenches draw their stimulus with `$urandom`. Pass `+verilator+seed+N`
  to vary it.
