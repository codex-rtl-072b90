# Encoded-activation streaming accelerator for small CNNs

A streaming CNN accelerator keeps every layer's weights and every
intermediate feature map on chip: each layer gets its own engine, engines are
chained by small FIFOs, and only the network input and the final scores touch
off-chip memory. The obstacle is on-chip memory. This design overcomes it by
storing **both weights and activations as short codebook indices** (1 to 8
bits) instead of fixed-point numbers. Each layer has a few small tables
(codebooks) of 32-bit fixed-point cluster centres. A code is turned back into
its centre right before a multiply, and each result is turned into the index of
its nearest centre right after it is computed. Arithmetic stays 32-bit fixed
point; storage and inter-layer traffic shrink to a few bits per value, and the
bit width can differ from layer to layer.

The RTL contains a parameterised library of layer blocks and one complete
network built from it: the LeNet-I configuration for MNIST (two convolution
layers, two max-pool layers, two fully connected layers, with per-layer bit
widths of 2/2/3 bits for activations and 3/4/2/4 bits for weights).

## Files

| file | block |
|---|---|
| `rtl/codex_pkg.sv` | fixed-point type, product rule, configuration-bus types |
| `rtl/stream_fifo.sv` | streaming buffer between layers |
| `rtl/swu.sv` | sliding window unit (convolution input reordering) |
| `rtl/mvau.sv` | matrix-vector-activation unit, built from the five blocks below |
| `rtl/input_decoder.sv` | code to fixed point for SIMD activations |
| `rtl/weight_mem.sv` | encoded weight storage, split across PEs |
| `rtl/weight_decoder.sv` | code to fixed point for PE x SIMD weights, one codebook copy per PE |
| `rtl/pe.sv` | SIMD-lane multiply-accumulate engine |
| `rtl/batch_norm.sv` | alpha * x + beta per neuron |
| `rtl/output_encoder.sv` | nearest-centre search (ReLU included) |
| `rtl/mpu.sv` | 2x2 max pooling on codes |
| `rtl/codex_top.sv` | the LeNet-I network |
| `tb/tb_<block>.sv` | one self-checking testbench per block, `tb_codex_top` runs the whole network |

## Numbers and codes

All decoded values are signed 32-bit fixed point with 16 fractional bits
(Q15.16, `codex_pkg::fx_t`). Every multiplication in the design, in the PEs and
in batch normalisation, uses one rule, `fx_mul`: take the full 64-bit product,
shift it arithmetically right by 16, keep the low 32 bits. Sums wrap at 32 bits.
Nothing saturates, so the codebooks and batch-norm factors must keep values in
range. The testbenches reproduce this rule exactly, which is why their
reference models match bit for bit.

A layer with `n`-bit activations has an output codebook of `2^n` entries. The
encoder returns `argmin_k |y - c[k]|`, and on a tie the lower index wins. Two
properties of the codebooks are the loader's job, and the hardware relies on
them:

* **`c[0] = 0` and the other centres positive.** A negative pre-activation
  is then nearest to 0, so the encoder performs ReLU with no extra logic.
* **Centres sorted ascending.** A larger code then always means a larger
  value, so max pooling can compare codes instead of values (see below).

The next layer's input codebook is the previous layer's output codebook. In the
testbench the network input is an 8-bit pixel code, and CONV1's 256-entry input
codebook maps pixel `k` to `k/256`. Any other mapping can be loaded.

## A layer: SWU -> MVAU -> MPU

```
 stream of codes      SWU                 MVAU                      MPU         stream of codes
 (pixel raster,  -> frame buffer,   ->  decode, multiply,     ->  2x2 max    ->  (pooled raster,
  CH/SIMD words       window order       batch-norm, encode        on codes       CH/PE words
  per pixel)          SIMD codes/word    PE codes/word                            per pixel)
```

All streams use a valid/ready handshake: a word moves on a rising edge where
both are high, and an offered word stays unchanged until it is taken. A
fully connected layer is an MVAU alone. Its input vector is the previous
feature map flattened pixel-major, channel-minor (`index = pixel*CH + ch`).

### Sliding window unit (`swu`)

A convolution runs on the MVAU as one matrix-vector product per output pixel.
The weight matrix has `MH` = output channels rows and `MW = K*K*IFM_CH`
columns, with column `(ky*K + kx)*IFM_CH + ch`. The SWU stores a whole input
frame of codes. It then reads the frame out window by window in exactly that
column order: output pixels in raster order, then `ky`, `kx`, then channel
chunks of SIMD codes. Stride is 1 and there is no padding. The frame store has
two banks: the next frame is written into one while the windows of the current
frame are read from the other, so consecutive images overlap in every layer.

### Matrix-vector-activation unit (`mvau`)

Parameters: `MW`, `MH`, `SIMD` (columns per cycle), `PE` (rows in parallel),
`IBITS`, `WBITS`, `OBITS`, `ENC_OUT`, `LAYER`.

The matrix is processed in *folds*. There are `SF = MW/SIMD` synapse folds
(column groups) and `NF = MH/PE` neuron folds (row groups). Row `r` belongs to
PE `r % PE` and to neuron fold `r / PE`. Each cycle the unit does the
following:

1. takes one word of SIMD input codes and decodes it with the input codebook
   (`input_decoder`);
2. reads one word per PE from the weight memory at address `nf*SF + sf` and
   decodes it with that PE's private copy of the weight codebook
   (`weight_decoder`);
3. in every PE, multiplies the SIMD pairs and adds them to the accumulator
   (`pe`).

In the last synapse fold the finished dot products go straight on, in the same
cycle, through `batch_norm` and `output_encoder`. The result is one word of PE
codes, written to the output register. When `ENC_OUT = 0` (the network's last
layer) the 32-bit batch-norm results are sent instead.

Each input vector is used `NF` times, but the stream delivers it only once.
During neuron fold 0 every input word is taken from the stream and also written,
still encoded, into an input buffer of `SF` words. Folds 1 to `NF-1` read the
buffer and leave the stream alone (`in_ready` is low). The buffer holds codes,
not decoded values, so it costs `SF*SIMD*IBITS` bits.

Timing: one fold step per cycle. An input vector takes exactly `SF*NF` cycles.
Output word `nf` appears in the register the cycle after its last synapse fold,
and holds neurons `nf*PE .. nf*PE+PE-1` (PE 0 in the low bits). If that word
has not been taken by the time the next one is ready, the unit stalls in its
last synapse fold. Decoding and encoding add no cycles: they sit in the same
combinational path as the multiply-accumulate. That path is long, and a
high-clock-rate implementation would pipeline it.

### Max-pooling unit (`mpu`)

Because codebooks are sorted, `max(code)` is the code of `max(value)`. The MPU
therefore pools 2-bit or 3-bit codes with narrow comparators. A row buffer of
`IN_DIM/2 * CH/PE` words holds the running maxima of the current pooling row.
The first pixel of a window (even row, even column) overwrites an entry; the
other three compare against it. The last pixel (odd row, odd column) sends the
pooled word out, combinationally, on the same handshake. With an odd `IN_DIM`
the last row and column are dropped.

## The LeNet-I instance (`codex_top`)

| layer | engines | matrix | SIMD | PE | in / weight / out bits | weight bits stored |
|---|---|---|---|---|---|---|
| CONV1 | swu 28x28x1, K=5 -> mvau -> mpu 24->12 | 20 x 25 | 1 | 4 | 8 / 3 / 2 | 1,500 |
| CONV2 | swu 12x12x20, K=5 -> mvau -> mpu 8->4 | 50 x 500 | 4 | 5 | 2 / 4 / 2 | 100,000 |
| FC1 | mvau | 500 x 800 | 5 | 10 | 2 / 2 / 3 | 800,000 |
| FC2 | mvau (unencoded output) | 10 x 500 | 10 | 10 | 3 / 4 / 32-bit | 20,000 |

Streaming buffers (8-deep `stream_fifo`) sit after each pooling unit and after
FC1. Each layer's PE equals the next layer's SIMD, so stream words pass from
layer to layer without width conversion. The outputs are ten 32-bit scores per
image on `out_data`, with class `c` in bits `[32c +: 32]`.

The bit widths are those the source paper lists for LeNet-I. It gives only
the layer counts, so the layer sizes are those of the classic Caffe LeNet. The
paper does not print the SIMD/PE factors either; the values here are chosen so
that adjacent layers' stream widths match.

### Loading parameters

Before the first image, every table is written through `cfg`
(`codex_pkg::cfg_t`), one entry per cycle. `cfg.layer` selects the layer
(0 = CONV1 ... 3 = FC2) and `cfg.sel` the table:

| `sel` | table | address fields |
|---|---|---|
| `CFG_WEIGHT` | one weight code of row `r`, column `c` | `pe = r % PE`, `addr = (r/PE)*(MW/SIMD) + c/SIMD`, `lane = c % SIMD`, code in `data` |
| `CFG_WCB` / `CFG_ICB` / `CFG_OCB` | weight / input / output codebook entry `k` | `addr = k`, value in `data` |
| `CFG_BN_ALPHA` / `CFG_BN_BETA` | alpha / beta of neuron `r` | `pe = r % PE`, `addr = r / PE` |

A weight-codebook write goes to every PE's copy at once. The full LeNet-I
load is 431,992 writes (430,500 weight codes, 1,160 batch-norm entries and
332 codebook entries).

### Throughput

The heaviest per-image loads are CONV1's MVAU (576 windows x 125 cycles =
72,000 cycles) and CONV2's MVAU (64 windows x 1,250 cycles = 80,000 cycles).
Both SWUs have two frame banks, so one image can be windowed while the next
arrives. Every layer therefore works on a different image at the same time,
and the interval between images is set by the slowest engine, CONV2. In
simulation, the first image's scores appear about 161,000 cycles after its
first pixel enters. When the output is not held off for long, each further
image follows about 80,000 cycles later (80,001 measured). The source paper
does not print its SIMD/PE factors or the clock of its MNIST design, so these
cycle counts cannot be compared with its latency figures.

## Verification

Each testbench drives its block with random data and compares every output
against a reference computed in the testbench from the raw tables. Each ends
with `TB_RESULT checks=N failures=M`, and each has a cycle-limit watchdog.

| testbench | what it checks |
|---|---|
| `tb_stream_fifo` | order under random valid/ready; `in_ready` drops after DEPTH words |
| `tb_input_decoder`, `tb_weight_decoder`, `tb_weight_mem`, `tb_batch_norm` | every lane / PE against the loaded table |
| `tb_pe` | accumulated Q15.16 dot products over 5 folds; accumulator holds when idle |
| `tb_output_encoder` | nearest-centre index against brute force, including negative inputs and exact ties |
| `tb_mvau` | 30 vectors against a full reference; exact `SF*NF`-cycle rate; random back-pressure; writes to another layer ignored |
| `tb_swu`, `tb_mpu` | three frames each in the stated order, with back-pressure (odd size for the MPU) |
| `tb_codex_top` | the full-size network with default parameters: random network, four images, 40 scores bit-exact; counts MVAU stalls, full FIFOs, pooled words, input-buffer reuse, layer overlap and ReLU clamps, and fails if any never happens |
| `tb_lenet2` | the LeNet-II configuration (weight bits 3/2/1/3) on the same hardware: narrower codes in the wider fields, four images bit-exact, no out-of-range FC1 weight code ever read |

The full-size test builds in seconds and runs in about 20 s of wall time.
With plain Verilator, from the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/codex_pkg.sv tb/tb_codex_top.sv \
          --top-module tb_codex_top -Mdir obj_top
./obj_top/Vtb_codex_top
```

Replace `codex_top` with any other block name to run its testbench. The
simulator has two states only, so every register that is read is reset or
loaded before use.

## Relation to the source paper

The following come from the paper:

* the streaming, all-on-chip organisation with one engine per layer;
* the SWU -> MVAU -> MPU layer structure;
* the MVAU's input decoder, encoded weight memory, per-PE weight codebook
  copies, SIMD-lane PEs, one-multiply-one-add batch normalisation and
  nearest-neighbour output encoder;
* ReLU through a zero first centre;
* max pooling on sorted codes;
* 32-bit fixed-point codebooks;
* the LeNet-I per-layer bit widths.

The following are this design's own choices:

* the Q15.16 format and wrap-around arithmetic;
* valid/ready streams and FIFO depths;
* the FINN-style weight layout and fold schedule (the paper builds on the FINN
  streaming library but does not spell these out);
* the configuration bus;
* tie-breaking in the encoder;
* stride-1, unpadded windows and the two whole-frame banks in the SWU;
* 2x2 pooling;
* the LeNet layer sizes and the SIMD/PE factors;
* treating the network input as 8-bit codes.

Known differences and gaps:

* The paper reports the cycles spent on input decoding, dot products and
  output encoding as separate stages. Here decoding and encoding take no
  cycles of their own.
* Only the LeNet-I network is assembled; LeNet-II, which differs only in
  narrower weight codes, runs on it unchanged (`tb_lenet2`). The VGG7 and AlexNet networks the
  paper also evaluates would need different tops built from the same blocks,
  with strided windows and 3x3 pooling for AlexNet, which are not built.
  ResNet-18 would also need residual additions and global average pooling,
  which the paper does not describe in hardware.
* The offline software (K-means codebooks, fine-tuning, bit-width search,
  compiler) is not hardware. Its outputs are what the configuration bus loads.
  Off-chip memory is represented only by the input and output streams.
