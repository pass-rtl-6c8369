# A sparse streaming convolution layer: skipping post-ReLU zeros without sparse encoding

After a ReLU, a large share of a CNN's feature-map values are exactly zero: on average around
57% across the convolutions of ResNet-18 and 65% across those of VGG16 on ImageNet. Every
multiplication by such a zero is wasted. Accelerators that skip them usually store the feature
map in a compressed format, which costs encoders, decoders and index logic. This design keeps
the ordinary dense stream and decides cycle by cycle which products to compute. It is a
*streaming* architecture: every convolutional layer has its own dedicated hardware, and layers
are chained by valid/ready streams. This repository gives the RTL for one such layer.

The layer's central part is the **sparse matrix-vector engine (S-MVE)**. It computes the dot product of a
Kx×Ky window with a weight vector using only k multipliers, where k ≤ Kx·Ky. The zero
feature values are dropped before they reach a multiplier. A window with nnz non-zero values
takes `max(1, ceil(nnz/k))` cycles instead of `ceil(Kx·Ky/k)`. The rest of the layer feeds many such
engines in parallel and keeps them in step, even though each one runs at a speed set by its own data.

All RTL is SystemVerilog-2017 in `rtl/`, one module per file. The testbenches are in `tb/`.

## 1. The sparse matrix-vector engine (`smve`)

```
 window (KK values) ─┬─► NZC ×KK ── flags ──┬──────────────► PSUM logic ── mux select, last
 weights (KK values) ┘                      ▼                    │ pending mask
                                    sparse crossbar ◄────────────┘
                                     (KK pairs → k)
                                          │ k pairs
                          ┌─ 0 ─┐         ▼
                          │ mux ├──► MAC ×k ──► adder tree ──► output register
                          └─◄───┘  (feedback)
```

* **NZC** (`nzc`): one per window position, flags a non-zero feature value. By default only
  the feature value is tested, because the engine targets activation sparsity. `CHECK_WEIGHT=1`
  also drops zero weights.
* **PSUM logic** (`psum_logic`): when a window is loaded it stores the NZC flags as the *pending
  mask*. Each cycle is one *pass*. On the first pass it makes the MAC multiplexers select 0, so
  that a new partial sum starts. On later passes the MACs add to their own previous result. It
  raises `last` in the pass that empties the mask. A window with no non-zero value still takes
  one pass and produces 0.
* **Sparse crossbar** (`sparse_crossbar`): from the pending pairs it routes up to k to the k
  MACs, lowest window index first, and reports which pairs it granted. The PSUM logic clears
  those from the mask.
* **MAC** (`smve_mac`): a 16×16-bit signed multiply into a 48-bit partial sum, behind the
  0/feedback multiplexer.
* **Adder tree** (`adder_tree`): a balanced binary tree over the k partial sums. Its result is
  registered at the engine output.

**Timing.** A window is accepted when the engine is idle or in the last pass of the previous
window, so windows run back to back. With P = max(1, ceil(nnz/k)), the result is valid P+1
cycles after the window is accepted. If the output is stalled, the MACs keep the finished
partial sums and the engine waits.

**Throughput.** The engine delivers `min(1, k/nnz)` windows per cycle. The table below gives
equivalent operations per cycle (9 × windows / cycles) for a 3×3 kernel. It was measured in
simulation over 600 random windows per point, with each feature value zero with the given
probability:

| sparsity | k=1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 |
|---|---|---|---|---|---|---|---|---|---|
| 0% | 1.00 | 1.80 | 3.00 | 3.00 | 4.49 | 4.49 | 4.49 | 4.49 | 8.96 |
| 20% | 1.25 | 2.33 | 3.27 | 4.26 | 4.70 | 5.12 | 6.36 | 7.95 | 8.96 |
| 40% | 1.68 | 3.06 | 4.23 | 5.17 | 6.13 | 7.27 | 8.35 | 8.90 | 8.96 |
| 60% | 2.48 | 4.37 | 5.81 | 7.05 | 8.17 | 8.84 | 8.93 | 8.96 | 8.96 |
| 80% | 4.41 | 6.73 | 8.07 | 8.75 | 8.91 | 8.94 | 8.96 | 8.96 | 8.96 |
| 100% | 8.96 | 8.96 | 8.96 | 8.96 | 8.96 | 8.96 | 8.96 | 8.96 | 8.96 |

With k ≥ 5, a fully dense window takes 2 cycles. As sparsity rises, fewer MACs reach the peak of
one window per cycle: at 60% sparsity, six MACs give 8.84 of the 8.96 that nine give. A design-space search
trades exactly this: MACs saved in one layer can go to a slower one.

## 2. The convolutional layer (`pass_conv_layer`)

```
                     ┌─ sliding_window ─ stream_fifo ─ stream_fork ─┬─ weights_memory ─ smve ─ accumulator ─ stream_fifo ─┐
 input  ─ input_     │     (stream 0)     (FIFO_DEPTH)               └─ … N_O engines per stream                        │
 words    stream_    ┤   …  N_I streams                                                                                ├─ sync_adder ─ bias ─┐ output_
          interface  └─ sliding_window ─ stream_fifo ─ stream_fork ─┬─ …                                                │   (one per          ├ stream_ ─ output
                                                                    └─ …                                               ─┘    output lane)     ┘ interface  words
```

Two kinds of parallelism multiply the engine count. There are N_I input streams, each carrying
C_I/N_I input channels, and N_O output lanes, each computing C_O/N_O filters. The layer
therefore holds N_I·N_O engines and N_I·N_O·k multipliers.

| block | what it does |
|---|---|
| `input_stream_interface` | Takes an input word of N_I values, one per stream. A word is accepted only when every stream's register is free: this is the input barrier. |
| `sliding_window` | Turns a stream of pixels (row, column, channel fastest) into Ky×Kx windows, one per output position and channel. It uses Ky−1 cascaded line buffers of (W+2·PAD)·C words and a window register file of C entries. It inserts zero padding without consuming input and supports any stride. |
| `stream_fifo` (input buffer) | FIFO_DEPTH windows per stream. A stream whose engines are momentarily slow keeps accepting input, so it does not stall the input barrier for the others. |
| `stream_fork` | Offers each window to the N_O engines of its stream and retires it once all have taken it. |
| `weights_memory` | Holds the weights of one engine: (C_I/N_I)·(C_O/N_O) vectors. It presents every window C_O/N_O times, once with each filter's weights. |
| `smve` | The sparse engine of section 1. |
| `accumulator` | Adds the dot products over the stream's C_I/N_I channels, keeping one partial sum per filter. |
| `stream_fifo` (result buffer) | RES_DEPTH finished sums per engine (section 3). |
| `sync_adder` | The output barrier. For one output lane it waits until all N_I streams offer a result, then adds them. |
| `bias` | Adds the 16-bit bias of the output channel. |
| `output_stream_interface` | Joins the N_O lanes into one output word. |

**Order of data.** Input word j of a pixel carries channels `j·N_I + m` on lane m. There are
H·W·C_I/N_I words per frame, in raster order. Output word j of an output position carries
channels `j·N_O + n` on lane n. There are HO·WO·C_O/N_O words, where
HO = (H + 2·PAD − Ky)/STRIDE + 1. Outputs are full-precision 48-bit sums, with no rounding,
saturation or activation. Frames follow each other without gaps.

**Loading.** Before streaming, write every weight vector through `wt_wr_*`: one vector per
cycle, addressed by input channel and filter, with tap `ky·Kx + kx` at index ky·Kx + kx. Write
every bias through `bias_wr_*`. The layer decodes these addresses to the right engine.

**Engines in lock-step.** The N_O engines behind one fork see the same feature values. Because
the NZC tests only the feature, they take the same number of passes and run in lock-step. The
streams differ from each other, because each carries different channels.

## 3. Keeping the streams in step: the two buffers

Each input stream's speed depends on how many zeros its own channels contain. Over a layer the
slowest stream sets the pace. Over short stretches, however, the slowest stream changes. If the
streams were forced into step at every output position, the layer would take the sum over
positions of the slowest stream *at that position*. That is more than the total work of the
slowest stream, and the difference is the cost that buffering must remove.

The paper this design follows places the balancing buffers at the inputs of the engines, and
sizes them at compile time. It uses a statistic of measured sparsity: the spread between
streams of the moving-average sparsity over a window of w samples. In this RTL those buffers
alone turned out not to help. The barrier adder takes exactly one result of every stream at a
time, and each accumulator holds one result, so no engine can get more than about one output
position ahead of the others. A fast stream therefore cannot bank work while it is fast.
Measured on a 16×16×16→8 layer (N_I = 8, k = 1, per-stream densities 33–53%):

| input buffer (windows) | result buffer (words) | cycles |
|---|---|---|
| 1, 4, 32 or 128 | 0 | 20 676 |
| 32 | 8 | 17 954 |
| 32 | 16 | 17 483 |
| 1 | 64 | 17 924 |
| 32 | 64 | 17 361 |
| slowest stream's own work | | 17 312 |

This design therefore also buffers the results: a `stream_fifo` of RES_DEPTH words after each
accumulator. The default, `FIFO_DEPTH·(C_O/N_O)/(C_I/N_I)`, gives the same number of output
positions of slack on both sides. Each buffer removes a different stall:

* the input buffer keeps a slow stream from blocking the shared input;
* the result buffer lets a fast stream run ahead of the output barrier.

At the default size the layer finishes within 0.04% of its slowest stream's work. Without result
buffers it takes 43% longer. Set `RES_DEPTH = 0` to get the structure exactly as the paper draws
it.

## 4. Parameters

Defaults describe the second convolution of ResNet-18 as the paper configures it for its
buffer study: N_I = 32 and k = 1. The layer sizes come from the network itself.

| parameter | default | meaning |
|---|---|---|
| `H`, `W` | 56, 56 | input height and width |
| `C_I`, `C_O` | 64, 64 | input and output channels |
| `KX`, `KY` | 3, 3 | kernel width and height |
| `PAD`, `STRIDE` | 1, 1 | zero padding on each side, stride |
| `N_I`, `N_O` | 32, 1 | input-stream and output-lane parallelism (must divide C_I and C_O) |
| `K_MAC` | 1 | MACs per engine, 1 … KX·KY |
| `FIFO_DEPTH` | 32 | engine input buffer, in windows |
| `RES_DEPTH` | 1024 | result buffer per engine, in words (0 = none) |

Data widths are in `pass_pkg`: 16-bit signed data, weights and biases, and a 48-bit signed
accumulator. There is no fixed-point scaling: values are integers.

On an FPGA the multipliers map to DSP slices, the buffers to LUTRAM, and the weights, line
buffers and result buffers to LUTRAM or block RAM. The weight memory reads asynchronously,
so large weight sets fit LUTRAM better than block RAM.

## 5. What follows the paper and what is this design's own

Taken from the paper:
* the engine's structure (NZC, sparse crossbar, k MACs with a 0/feedback multiplexer, PSUM
  logic, adder tree) and its multi-cycle handling of dense windows;
* the layer's block order (sliding window, buffer, fan-out to N_O engines, accumulator,
  barrier adder across N_I, bias);
* 16-bit data;
* input buffers at the engines.

This design's own choices:
* every handshake (valid/ready throughout) and every register placement;
* the crossbar's lowest-index-first routing;
* stream order, channel mapping, padding and stride;
* the weight memory's organisation and the load ports;
* the 48-bit accumulator;
* the result buffers of section 3.

Not included:
* the other layer types of a network (ReLU, pooling, fully-connected, residual additions),
  which the paper takes from an existing streaming toolflow;
* the chaining of layers into a network;
* the compile-time design-space search that picks N_I, N_O, k and buffer depths per layer. This
  is software: for every layer, k is chosen to balance `min(1, k/((1−s)·Kx·Ky))` against the
  slowest layer, under a DSP budget of Σ N_I·N_O·k.

## 6. Simulating

Every testbench is self-checking. It ends with `TB_RESULT checks=N failures=M`, and a watchdog
ends a run that hangs. With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/pass_pkg.sv tb/tb_smve.sv --top-module tb_smve
./obj_dir/Vtb_smve
```

Use the same command for any `tb/tb_<block>.sv`. The tests that matter most are:

* `tb_smve`: checks the dot products of 400 windows of random sparsity, including all-zero and
  fully dense ones, for k = 3 and k = 1. It also checks the exact cycle count, Σ max(1,
  ceil(nnz/k)) plus the pipeline latency, and repeats the run under random back-pressure.
* `tb_smve_sweep`: produces the table above. It runs one engine per k = 1…9 at 11 sparsity
  levels and checks every result and every cycle count exactly. Each point must also lie within
  6% of the analytic 9 / E[max(1, ceil(N/k))], where N ~ Binomial(9, 1 − sparsity).
* `tb_pass_conv_layer`: runs a reduced layer, 7×6×4 → 6 with N_I = 2, N_O = 2, k = 2 and buffer
  depth 4, for three frames. It compares every output with a direct convolution. It checks the
  cycle count of the first frame against the slowest stream's work and the lock-step bound. It
  requires every mechanism to occur at least once: multi-pass windows, all-zero windows, a full
  input buffer, a stream running ahead into its result buffer, the barrier waiting, input and
  output back-pressure, and padding.
* `tb_pass_conv_layer_full`: runs the same checks on the layer at its default parameters, with
  no overrides, for one 56×56×64 frame with per-stream densities of 33–53%. It takes about
  2.5 minutes.

The other testbenches each exercise one block against an independent model, under random
back-pressure wherever the block has a handshake. All simulations are two-state. Memories that
are read before they are written are never relied on.

Checks beyond simulation: Verilator lint and the slang front end accept every file. The
`SYNCASYNCNET` lint warnings come from the handshake assertions, which use the asynchronous
reset as their `disable iff` condition.
