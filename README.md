# A low-precision, block-sparse MLP accelerator (784-512-512-10)

This RTL describes the inference hardware from Yin et al., "Minimizing Area and Energy
of Deep Learning Hardware Design Using Collective Low Precision and Structured
Compression". The network is a fully-connected one for 28x28 images: two hidden layers
of 512 neurons and 10 outputs. Two ideas keep it small:

* **Very low precision.** The main configuration uses 8-bit activations and 3-bit
  weights. A 1- or 2-bit weight build replaces the multipliers with shifters.
* **Coarse-grain sparsity (CGS).** The weight matrix of each hidden layer is cut into
  16x16 blocks. Training keeps only one block in `CGS_RATIO` (8X in the main
  configuration) and forces all others to zero. Only the surviving blocks and one small
  index per block are stored on chip.

The two add up. The stored weights of the main design take about 10X less memory than
the dense 8-bit network. The paper reports 98.4 % MNIST accuracy at 20 nJ per
classification for it in 40 nm.

There is a third saving. Every layer skips zero inputs entirely: it spends one cycle per
**non-zero** input activation. MNIST images are mostly background, and half or more of
the ReLU outputs are zero.

## How one image moves through the chip

```
pixels ──► [input buffer]──►┐
          784 x 8 bit       │  zero skipping: next non-zero input i
                            ▼
                    ┌──────────────────┐   row i/8, slice i%8   ┌──────────────┐
                    │ layer controller │ ─────────────────────► │ weight SRAM  │─► weight buffer ─┐
                    │  (FSM, pipeline, │   row i/16 (if new)    │ index SRAM   │─► index buffer ──┤
                    │   handshakes)    │ ─────────────────────► └──────────────┘                  ▼
                    └──────────────────┘                                             CGS demultiplexers
                            │ a_i (travels with the request)                          512 weight lanes
                            └──────────────────────────────────────────────────────────►  512 MAC lanes
                                                                                             │ x'
                                              batch norm  y = x'·γ' + β'  ◄───────────────────┘
                                              ReLU, clip to 0..255  ──► next layer's input buffer
```

The same column is repeated three times (`fc_layer`). The output layer has no index
memory, since it is stored dense, and its activation is linear with 16-bit saturation.
Layer *n* hands its 512 activations to the input buffer of layer *n+1* in a single
valid/ready transfer, so the three layers work on three different images at once.

Per layer and image, the sequence is:

1. **Wait.** The layer waits until its input buffer is full and its own previous
   result has been taken.
2. **Start.** The non-zero mask of the input vector is loaded into the zero-skipping
   unit and the 512 accumulators are cleared.
3. **Issue.** Every cycle the lowest remaining non-zero input *i* is issued: a read of
   weight row `i / NPR` and, when *i* starts a new 16-input block-row, a read of index
   row `i / 16`. The activation value `a_i` travels with the request.
4. **Capture.** One cycle later the slice `i % NPR` of the SRAM row goes into the weight
   buffer, and the index row into the index buffer. The index SRAM keeps its output
   between reads, so the same index row serves all 16 inputs of a block-row.
5. **Accumulate.** One cycle after that, the demultiplexers place the kept blocks on the
   512 lanes. Every lane adds `a_i × w`, and lanes of dropped blocks add nothing.
6. **Release.** When no non-zero input is left, the input buffer is released. The
   previous layer may now refill it while this layer drains.
7. **Offer.** After the drain, the batch-normalised and activated outputs are offered
   with `out_valid`. They stay constant until `out_ready`.

**Latency.** A layer's result becomes valid **nnz + 3 cycles** after it starts, where
nnz is the number of non-zero inputs. An all-zero input vector therefore costs 3 cycles.

**Throughput.** The first layer receives the image as a pixel stream, one pixel per
cycle, and its single input buffer cannot take pixels of the next image while it is
still issuing the current one. At one pixel per cycle, this input stream (about 784
cycles per image) limits throughput, not the MAC work (about nnz ≈ 150 cycles for
typical MNIST digits). The paper does not say how images enter the chip.

## The compressed weight format

This is the part that needs the most care when preparing weights for the hardware.

Take a hidden layer with `NIN` inputs and `NOUT` = 512 outputs. View its weight matrix
as `NIN/16` block-rows (16 consecutive inputs each) by `NB = 512/16 = 32` block-columns.
Every block-row keeps exactly `KEPT = NB / CGS_RATIO` blocks: 4 for 8X, 16 for 2X. The
fixed count per block-row is this design's choice, taken from the uniform compressed
matrix drawn in the paper's CGS figure. Purely random dropping would give varying
counts, and then the memory rows would not line up.

* **Index memory.** There is one row per block-row, holding `KEPT` indices of
  `XW = log2(NB)` bits (5 bits). Index *k* sits at bits `[k*XW +: XW]` and names the
  output block (0..31) of the *k*-th kept block. Indices of one row must be distinct,
  and an assertion checks this. For layer 1 the index memory is 49 rows × 20 bits.
* **Weight memory.** Each input neuron owns `VEC = KEPT*16` compressed weights (64 at
  8X). Weight `m = k*16 + j` of input *i* goes to output neuron `idx[k]*16 + j`. An SRAM
  row holds `ROW_WEIGHTS` = 512 weights, which the paper gives as the macro width, so one
  row holds `NPR = 512 / VEC` input neurons (8 at 8X). Input *i* is in row `i / NPR`,
  slice `s = i % NPR`, and its weight *m* is at bits `[(s*VEC + m)*WBITS +: WBITS]`. For
  layer 1 that is 98 rows × 1536 bits; for layer 2, 64 rows.
* **Output layer.** It is dense, with no index memory. Each row holds `OUT_NPR` (1) input
  neurons of 10 weights; weight *n* of input *i* is at `[n*WBITS +: WBITS]` of row *i*.
  The paper does not give this mapping.

A worked example at 8X: input 37 lies in block-row 2 (index row 2) and in weight row 4,
slice 5, which is bits `[5*64*3 +: 192]`. If index row 2 holds {7, 0, 30, 12}, then
stored weights 0..15 of input 37 feed neurons 112..127, weights 16..31 feed neurons
0..15, and so on.

## Arithmetic

| quantity | format |
|---|---|
| activation | unsigned `ABITS` (8) bits, levels 0..255 |
| weight, `WBITS` ≥ 3 | two's complement integer (3 bits: −4..3), multiplied |
| weight, `WBITS` = 2 | code 00 −1/4, 01 −1/2, 10 +1/2, 11 +1/4 (the paper's table); computed with shifts, product scaled ×4 (−a, −2a, +2a, +a) |
| weight, `WBITS` = 1 | 0 → −1, 1 → +1 |
| product | signed `ABITS+WBITS+1` bits |
| accumulator x′ | signed `ABITS+WBITS+1+⌈log2 NIN⌉` bits (22 bits for layer 1), so it cannot overflow |
| γ′ | signed 16 bits, 12 fraction bits |
| β′ | signed 32 bits, in the scale of x′·γ′ (i.e. also 12 fraction bits) |
| batch-norm output | `y = floor((x′·γ′ + β′) / 2^12)` |
| hidden activation | `min(max(y, 0), 255)` |
| output score | `y` saturated to signed 16 bits |

The batch norm is folded as in the paper: `γ′ = γ/σ` and `β′ = β + (b − μ)γ/σ`. The bias
*b*, the mean and the variance therefore need no hardware of their own: one multiply and
one add per neuron. Any scale factor of the low-precision formats goes into γ′. That
includes the ×4 of the 2-bit codes and the fractional activation levels (for example,
the 0.25 steps of 3-bit activations). The number formats in this table are this
design's choice; the paper gives none.

The class decision (arg-max of the 10 scores) is left to the host.

## Interfaces of `dnn_top`

| port | meaning |
|---|---|
| `pix_valid`, `pix_ready`, `pix_data[7:0]` | pixels in index order, 784 per image, valid/ready |
| `res_valid`, `res_ready`, `res_score[10*16-1:0]` | score *n* at bits `[n*16 +: 16]`, held until taken |
| `cfg_we`, `cfg_layer[1:0]`, `cfg_sel`, `cfg_addr[15:0]`, `cfg_wdata[1535:0]`, `cfg_gamma[15:0]`, `cfg_beta[31:0]` | parameter load, one write per cycle |

`cfg_sel` is `dnn_pkg::cfg_sel_e`, and `cfg_layer` selects layer 0, 1 or 2:

* `CFG_WEIGHT` writes the low bits of `cfg_wdata` as weight row `cfg_addr`.
* `CFG_INDEX` writes index row `cfg_addr` (hidden layers only).
* `CFG_BN` sets γ′ and β′ of neuron `cfg_addr`.

Loading is meant for an idle accelerator, because the load port has priority over
inference reads of the same SRAM. Reset is active-low and asynchronous for control
state. Memory contents and γ′/β′ are not reset.

Assertions check three handshake and format rules:

* A result stays offered until it is taken.
* A layer only releases an input buffer that is full.
* The kept-block indices of a block-row are distinct.

## Parameters

All defaults are the paper's main configuration, or derived from it. The parameters
marked *chosen* are not given in the paper.

| parameter (`dnn_top`) | default | origin |
|---|---|---|
| `N_IN`, `N_HID`, `N_OUT` | 784, 512, 10 | paper |
| `ABITS`, `WBITS` | 8, 3 | paper (main design A:8b, W:3b) |
| `CGS_BLK`, `CGS_RATIO` | 16, 8 | paper (16x16 blocks for FC layers, 8X) |
| `ROW_WEIGHTS` | 512 | paper (512 weights per SRAM row) |
| `OUT_NPR` | 1 | chosen |
| `SCORE_W`, `GAMMA_W`, `BETA_W`, `BN_FRAC` | 16, 16, 32, 12 | chosen |

The other precision and compression points that the paper compares are builds of the
same RTL with other parameters. Examples: `WBITS=1` or `2` (shifters instead of
multipliers), `ABITS=3`, and `CGS_RATIO=2` or `4`. `ROW_WEIGHTS` must be a multiple of
`KEPT*16`.

## Module map

| file | role |
|---|---|
| `rtl/dnn_pkg.sv` | shared constants, `cfg_sel_e`, width helpers |
| `rtl/dnn_top.sv` | three layers, their handshakes, the load port |
| `rtl/fc_layer.sv` | one layer column: buffer, memories, buffers, decompression, MACs, BN, activation |
| `rtl/layer_controller.sv` | per-layer FSM (IDLE/RUN/DRAIN/DONE), read issue, 3-stage pipeline, handshake |
| `rtl/zero_skip.sv` | pending mask + priority encoder, one non-zero index per cycle |
| `rtl/input_buffer.sv` | layer input vector, serial (pixels) or one-cycle parallel fill, non-zero mask |
| `rtl/sram_sp.sv` | single-port synchronous SRAM model with held read data |
| `rtl/cgs_decompress.sv` | demultiplexers from `KEPT` stored blocks onto 512 lanes |
| `rtl/neuron_accum.sv` | 512 parallel MAC lanes |
| `rtl/lp_mult.sv` | shift- or multiply-based low-precision product |
| `rtl/batch_norm.sv` | `x′·γ′ + β′`, fixed point |
| `rtl/activation.sv` | ReLU with clipping, or linear with saturation |

## Simulation

Every module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv`. Each one ends
by printing `TB_RESULT checks=N failures=M` and has a cycle watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal rtl/dnn_pkg.sv tb/tb_dnn_top.sv \
          -y rtl -y tb --top-module tb_dnn_top
./obj_dir/Vtb_dnn_top
```

* **`tb_dnn_top`** builds a random network at reduced size. It uses 64 inputs, 64 hidden
  neurons, CGS 2X (so every block-row keeps 2 of 4 blocks) and 64-weight rows. The test:
  - loads the network through the cfg port;
  - streams 8 sparse images, one of them all zero, with random gaps;
  - takes the scores with random back-pressure;
  - compares all scores with an integer reference model of the equations above;
  - checks that each layer spent exactly one issue cycle per non-zero input;
  - counts each mechanism and fails if one never happened. The mechanisms are zero
    skipping, index-row reuse, CGS demultiplexing, stalls on every handshake, layers
    issuing concurrently, and ReLU zeroing and clipping.
* **`tb_dnn_top_full`** runs the same test with every parameter at its default
  (784-512-512-10, W:3b, A:8b, CGS 8X) on 8 images. Building it takes under a minute,
  and running it takes under a second.
* **`tb_dnn_top_a3w1`, `tb_dnn_top_a8w8`, `tb_dnn_top_a8w2`** repeat the reduced-size
  test for other precision and compression points: A:3b W:1b with CGS 4X, A:8b W:8b with
  CGS 2X, and the 2-bit shift-coded weights with CGS 8X.
* **`tb_layer_controller`** checks the read sequence, the index-reuse rule and the
  nnz + 3 latency. **`tb_fc_layer`** checks one CGS layer end to end, including its
  latency. The other unit testbenches compare their block against a reference
  exhaustively or with random vectors.

The tests use random weights and images. MNIST data and trained weights are not part of
this design, so accuracy figures cannot be reproduced from it.

## What the design adds and what it leaves out

Chosen here, because the paper does not give them:

* the valid/ready handshake and the single-bank input buffers;
* the 3-stage read pipeline;
* the fixed number of kept blocks per block-row;
* the index encoding;
* the output-layer memory mapping;
* all fixed-point formats;
* the 3-bit weight levels (two's complement);
* the 1-bit weight code;
* the load port.

Not modelled:

* **SRAM macros.** The SRAMs are plain arrays, not compiled macros, so their area,
  timing and power do not follow from this RTL.
* **Clock gating.** The paper relies on extensive clock gating inserted during
  synthesis. The enables in the RTL (SRAM chip selects, the accumulate enable, the
  index-read suppression) are where such a tool would gate.
* **Training.** The training side, which selects random blocks and quantises weights
  during training (the paper's Eq. (1)), is software and is not part of this RTL.

What the default build can run:

* **Runs as built:** the main MNIST configuration (A:8b, W:3b, CGS 8X) and binary-weight
  models with the same block layout.
* **Need other parameter values:** the 2X/4X compression and 8-bit-weight models the
  paper compares. The same RTL supports them.
* **Not supported:** the CIFAR-10 CNN, for which the paper reports accuracy and weight
  memory only. The hardware has no convolution.
