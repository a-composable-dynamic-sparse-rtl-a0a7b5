# Sparse dataflow accelerator for event-based vision

This is a SystemVerilog implementation of a composable dynamic sparse dataflow
architecture for event-camera classification. The network runs entirely on
chip. Every layer is its own hardware module. The modules are chained by a
common token-feature stream that carries only the non-zero pixels of each
feature map. Each layer works as soon as its data arrives, so all layers run
at the same time on successive pixels of a frame.

## Stream format

- A **token** is `{end_flag, y, x}` (`esda_pkg::token_t`, 12-bit
  coordinates). Tokens go in raster order.
- A **beat** on a stream is a token plus the int8 feature vector of that
  pixel. Every link uses valid/ready handshaking.
- A frame ends with a token whose `end_flag` is set. That token carries no
  feature.
- Weights and activations are 8-bit. Accumulators are 32-bit.
- An output is requantised as: bias, then arithmetic right shift, then
  optional ReLU, then saturation to int8.

## Blocks (`rtl/`)

| module | role |
|---|---|
| `esda_pkg` | Token and offset types, raster compare, requantisation, saturating add, weight/bias ROM formula |
| `stream_fifo` | First-word-fall-through FIFO. Used as a token FIFO and as the shortcut feature FIFO |
| `tokenizer` | Turns a raster bitmap (BM_W-bit words) plus serialized feature vectors into the token stream, then adds an end token |
| `conv1x1` | Point-wise convolution: PF multipliers, an adder tree and an accumulator. Takes OC x ceil(IC/PF) cycles per token |
| `slb_s1` | Stride-1 sparse line buffer. Holds K rows of features and a bitmap, plus a token FIFO. Releases the head token when the tail has passed its window (Eq. 4). Then emits the head token and the kernel offset stream of its non-zero neighbours |
| `slb_s2` | Stride-2 sparse line buffer. Even and odd rows go to separate token FIFOs. A token merge forms one output per 2x2 grid (Eq. 5). The window is centred at (2ox, 2oy) |
| `dwconv_compute` | Depthwise KxK sum over the offset stream. Takes ceil(C/PF) cycles per offset |
| `conv_compute` | Full KxK sum over the offset stream. Takes OC x ceil(IC/PF) cycles per offset |
| `conv_kxk` | Sparse line buffer (picked by stride) plus compute unit (depthwise or full) |
| `mbconv_block` | 1x1 expand, KxK depthwise, 1x1 project. At stride 1 with equal channels it adds an identity shortcut through a FIFO, with a saturating add |
| `pool_fc` | Global pooling, fully connected layer and argmax. The logit is computed as `sum_c w*S_c + b*count`, so no division is needed |
| `esda_top` | The whole classifier |

## Default network (`esda_top`)

The input is a 34x34 two-channel event histogram (the N-MNIST size), and
there are 10 classes. The layers are:

| layer | operation | channels | output map |
|---|---|---|---|
| stem | 3x3 full convolution, stride 2 | 2 -> 16 | 17x17 |
| blk0 | MBConv, stride 1, residual | 16 -> 32 -> 16 | 17x17 |
| blk1 | MBConv, stride 2 | 16 -> 32 -> 24 | 9x9 |
| blk2 | MBConv, stride 1, residual | 24 -> 48 -> 24 | 9x9 |
| blk3 | MBConv, stride 2 | 24 -> 48 -> 32 | 5x5 |
| head | pooling + FC | 32 -> 10 | — |

Notes on the default network:

- PF is 4 in every layer.
- This layer list is an example of the kind of network the architecture
  targets. It is not a network published layer by layer.
- Stride 2 uses padding 1 and a side of ceil(n/2). So the maps go 34, 17, 9,
  5, where the published N-MNIST model goes 34, 17, 8, 4.
- Weights come from a fixed hash (`esda_pkg::wgen`, `bgen`) with one seed
  per layer. They stand in for trained weights.

## Host interface

Inputs:

- The bitmap, as `bm_*` words. Bit b of word i is pixel i*BM_W + b.
- The feature vectors of the set pixels, in raster order, on `fin_*`.

Output:

- One `res_*` beat per frame, carrying the class and its logit.

## Not implemented

- The processing-system software that builds and serializes event
  histograms.
- The design-time optimizer that picks the per-layer parallel factors and
  the network.

## Verification (`tb/`)

- `esda_ref_pkg` holds a dense reference model. It computes submanifold
  convolution straight from its definition.
- Each testbench streams random sparse frames with random gaps and stalls.
  Densities range from empty to full. The testbench compares every output
  with the reference model.
- Testbenches and what they cover:
  - `tb_stream_fifo`
  - `tb_tokenizer`
  - `tb_conv1x1`: also checks the OC x ceil(IC/PF) + 2 cycle token spacing
  - `tb_conv_kxk`: covers both line buffers and both compute units
  - `tb_pool_fc`
  - `tb_mbconv_block`
  - `tb_esda_top`: the full default-size design. It also counts line-buffer
    stalls, stride-2 merges, residual adds, end flushes and head releases,
    and fails if any of them never occurred.
