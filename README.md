# A layer-pipelined, sparsity-aware CNN accelerator in SystemVerilog

A convolutional network is usually run on an FPGA by one big, generic engine that processes the layers one after another. This design builds a separate, right-sized hardware stage for every operation of the network and chains the stages together. Every stage works on a different part of the image at the same time. Activations flow from stage to stage on chip, so only the image goes in and only the class scores come out.

The convolution stages also skip pruned weights. Each stage stores only the non-zero weights of its layer, and each weight carries a small address code that says which input activation it multiplies. A multiplier therefore spends no cycle on a zero weight. With 85 % of the weights pruned, a layer takes about a sixth of the cycles it would take dense.

This RTL is written from a published description of such an accelerator (HPIPE, FPL 2020). It implements:
- the stages that description names: Placeholder, Conv2D, MatMul, BiasAdd, MaxPool, Relu/Relu6, Add and Mean;
- the inside of the sparse convolution engine;
- a top level that chains these stages into the head of a ResNet-50-style network.

## 1. Lines, beats and coarse backpressure

Every stage has the same streaming interface.

- A **line** is one output row of a layer with all of its channels: `W × C` activations.
- A line moves as **C beats**. One beat carries one channel for all `W` columns in parallel (`data[0..W-1]`) and is marked by a one-cycle `new_oc` pulse.
- Beats within a line may have gaps. There is no per-beat ready signal.
- Activations are 16-bit signed fixed point (`hpipe_pkg::act_t`). Each conv stage has a `SHIFT` parameter that sets its binary point.

Flow control works per line, not per beat.

- A stage with an input buffer raises `coarse_backpressure` when its buffer has no slot for another whole line.
- A producer samples this signal only before it starts a line. Once started, it sends the whole line.
- A stage without a buffer (BiasAdd, Relu) connects its consumer's backpressure straight to its producer.
- A producer with several consumers sees the OR of their backpressure signals.

A small timing detail keeps this safe. A consumer's buffer claims a slot when the first beat of a line arrives. Until then, its backpressure still looks low. So after sending a line's first beat, a stage waits:
- until that beat has left its own output register (the `ocnt` counter in each stage), and
- then `BP_GUARD` = 4 more cycles,

before it samples backpressure again. Without this wait, two back-to-back lines could both see "space" and overrun a one-slot buffer.

## 2. The input line buffer (`hpipe_line_buffer`)

Each buffered stage keeps its recent input lines in a ring of `LINES` slots.

- Each slot is one word per channel. A word is a whole padded line of one channel: `W + PAD_L + PAD_R` activations.
- For a convolution, the ring is split into `N_SPLITS` banks. Input channel `c` goes to bank `c mod N_SPLITS`, at word `slot × CB + c / N_SPLITS`, where `CB = ceil(C / N_SPLITS)`.

Padding is handled as the lines are written.

- **Pad columns:** the pad muxes place the incoming `W` activations after `PAD_L` pad values and fill the remaining columns with `PAD_VAL`.
- **Pad lines:** at the start of each image, the buffer writes `PAD_T` lines of `PAD_VAL` itself. After the last real line it writes `PAD_B` more. It takes no input while doing either.
- **Pad value:** `PAD_VAL` is 0 for convolutions and the most negative activation for max pooling. A padded max pool therefore behaves like TensorFlow's SAME pooling.

The buffer and the stage that reads it talk through a small handshake:

| Signal | Direction | Meaning |
|---|---|---|
| `base_addr` | to reader | word address of the oldest line still needed |
| `avail` | to reader | number of complete lines counted from the base |
| `advance` | from reader | move the base forward by `STRIDE` lines after an output row |
| `release` | from reader | free those slots, a few cycles later, once the pipeline reads of that row are done |

Assertions check three rules:
- no line is written into an occupied slot;
- no more slots are released than are held;
- the base never moves past the lines that are available.

## 3. Sparse weights and how they address activations (`hpipe_conv`)

The compressed weights live in a per-split memory. Each entry is 32 bits:

```
 31            20 19    16 15             0
+---------------+--------+----------------+
|  runlength    | x_idx  |     weight     |
+---------------+--------+----------------+
```

For each output channel `oc` and split `s`, the non-zero weights `w[oc][ky][kx][c]` with `c mod N_SPLITS = s` are listed in (ky, c, kx) order.

- `yz = ky·CB + c / N_SPLITS` is the word offset of the weight's input line inside the bank.
- `runlength` is this weight's `yz` minus the `yz` of the previous entry. For the first entry of each output channel, it is `yz` itself.
- `x_idx = kx` is the kernel column.

All splits must take the same number of cycles on one output channel. Each split's list is therefore padded with zero-weight entries (runlength 0, x 0, weight 0) up to the longest list. That common length `L[oc]`, the channel's *weight lines*, is stored in a second memory, indexed by `oc`.

While an output row runs, the stage reads one entry per split per cycle. For each entry:
1. The input buffer controller adds the runlength to a running offset. It adds the ring base and wraps at the ring depth, which gives the bank word to read.
2. The word read back is one whole padded input line of one channel.
3. For output column `ox`, the **X mux** picks the activation at column `ox·STRIDE + x_idx` and sends it to the multiplier.

All output columns of the row work in parallel. There is one multiplier per split for every output column. So `W_OUT × N_SPLITS` multipliers do work on every cycle, except on the zero padding entries.

An output row is started only when three things hold:
- `KH` lines (counted from the base) are in the buffer;
- the consumer is not backpressuring;
- the previous row has finished issuing.

After the row, the base moves forward by `STRIDE` lines.

The testbench `tb_hpipe_conv` contains a reference compressor. It is a readable statement of the encoding above, and it is what fills the memories in every test.

## 4. The DSP chain and the staircase (`hpipe_dsp_chain`)

The chain models how a hard DSP block is used: two 16×16 multipliers, an adder for their products, and an adder for the chain input. There are `N_SPLITS/2` such blocks per output column, connected through their chain ports.

- Block `d` registers its pair sum plus the sum arriving from block `d-1`.
- The last block adds everything into a 48-bit accumulator. A zero mux in front of the accumulator clears it on the first weight line of every output channel.

Each block adds one register to the chain. So the products of split pair `d` must enter `d` cycles later than those of pair 0, or the sums would not line up. The compiler in the original flow does this by storing the weights, x indices and runlengths of later splits shifted down in memory. This RTL gets the same staircase timing in a different way: it stores all splits aligned and delays the issue signals of pair `d` by `d` cycles (`hist[]` in `hpipe_conv`).

The **accum/valid controller** loads `L[oc]` into a down counter and marks the last weight line. The cycle after the last line reaches the accumulator, the stage:
- shifts the sum right by `SHIFT`;
- saturates it to 16 bits;
- sends it as one beat with `out_new_oc`.

Beats of one line are therefore spaced `L[oc]` cycles apart. A row takes `Σ L[oc]` cycles. The latency from row start to the first beat is `L[0] + N_SPLITS/2 + 3` cycles.

MatMul needs no separate hardware. A fully connected layer is a 1×1 convolution on a 1×1×C input, so it uses the same engine with `W_IN = H_IN = KH = KW = 1`. A depthwise convolution can be loaded as a convolution whose weights are zero except on the diagonal. It runs correctly but uses the multipliers poorly (see Departures).

## 5. The other stages

| Module | Buffer | What it does |
|---|---|---|
| `hpipe_placeholder` | FIFO of 2 lines | Takes the image one activation per cycle (`host_data/valid/ready`, order row, column, channel) and sends it as lines of `C` beats. |
| `hpipe_bias_add` | none | Adds the bias of the channel in flight. Biases come over the cfg bus. Saturates. |
| `hpipe_relu` | none | `max(x,0)`. With `RELU6 = 1` it also clamps at 6.0 (`SIX` = 1536, i.e. 6 with 8 fraction bits). |
| `hpipe_maxpool` | ring, pad = most negative | For each channel, reads the `KH` lines of the window (one per cycle) and keeps a running column-wise max. Then takes the max over `KW` columns at each stride position. One beat every `KH` cycles. |
| `hpipe_add` | one ring per input | Waits until both inputs hold a line, then sends their saturated sum one channel per cycle. Each ring's depth is a parameter, so a long path and a short path can be given matching buffering. |
| `hpipe_mean` | per-channel sums | Sums every channel over the image. At the end, multiplies each sum by `round(2^24/(H·W))`, shifts right by 24 and sends `C` beats of width 1. Holds backpressure while a result waits. |

Every stage registers its outputs once. That register stands for the pipelined wire between two stages.

## 6. The top level (`hpipe_top`)

With its default parameters, `hpipe_top` builds the first stages of ResNet-50 on a 224×224×3 image, followed by a classifier.

```
host ─► Placeholder ─► Conv2D 7×7/2 (3→64) ─► BiasAdd ─► MaxPool 3×3/2 ─► Relu ─┬─► Conv2D 1×1 (64→256) ─► BiasAdd ─► Relu ─┐
                                                                               └─► Conv2D 1×1 (64→256) ───────────────────────┴─► Add ─► Relu
      ─► Mean ─► MatMul (256→1000) ─► BiasAdd ─► out_data / out_new_oc
```

- All conv engines use `N_SPLITS = 4`.
- Weight buffers per split: 1024 entries for conv1, 2048 for each 1×1 conv, 16384 for the classifier. That is enough for 85 %-sparse weights with room to spare.
- The host loads every weight, weight-line count and bias through `cfg` before the first image. `cfg` carries: write enable, stage id, memory select, bank, address and 32 data bits. Stage ids are:

  | Stage | Id |
  |---|---|
  | conv1 | 1 |
  | first BiasAdd | 2 |
  | main-path conv | 3 |
  | its BiasAdd | 4 |
  | shortcut conv | 5 |
  | classifier | 6 |
  | classifier BiasAdd | 7 |

- Results leave as 1000 beats of one 16-bit logit each. `out_backpressure` lets the receiver hold back the next image's result.

The shortcut conv feeds the Add directly. Relu's two consumers share their backpressure through an OR.

## 7. Verifying and simulating

Each module has a self-checking testbench in `tb/`. Each one:
- compares every output beat with a reference computed inside the testbench;
- checks the cycle spacing where the design fixes it (beats `L[oc]` apart in the conv; one beat every `KH` cycles in max pooling);
- ends with a `TB_RESULT checks=… failures=…` line;
- has a watchdog.

`tb_hpipe_top` runs the full chain at a reduced size:
- image 20×14×3, 8 and 12 channels, 10 classes, four images back to back;
- randomly pruned weights (85 % zeros), compressed by the testbench;
- a bit-exact reference model of the whole network.

It also counts ten mechanisms and fails if any of them never happened:
- host stalls and Placeholder backpressure;
- conv and max-pool pad lines;
- a conv held by its consumer;
- the residual Add waiting for one path;
- the result held by the receiver;
- ring slots released;
- Relu clamping;
- the Mean stage holding its input.

`tb_hpipe_top_full` runs the top with every parameter at its default: one 224×224×3 image through conv1 (64 channels), the block with 256 channels and the 1000-class classifier. It checks all 1000 logits against the reference. One image takes about 166,000 clock cycles from first pixel to last logit. Verilator needs several minutes to build this model; the simulation itself takes seconds.

To run a testbench with plain Verilator (5.x):

```
verilator --binary --timing --assert -Irtl rtl/hpipe_pkg.sv $(ls rtl/*.sv | grep -v hpipe_pkg) tb/tb_hpipe_conv.sv \
          --top-module tb_hpipe_conv -o sim
./obj_dir/sim
```

All testbenches draw their data with `$urandom`. Every state element is reset, so the two-state simulator starts from a defined state.

## 8. Departures from the original description and own choices

- **Memory loading.** In the original flow, the compiler writes memory initialisation files. Here the weights, weight-line counts and biases are written at run time over the `cfg` bus, and the testbenches do the compressing.
- **Staircase.** The staircase is made by delaying each split pair's issue signals (§4), not by storing shifted memory images. The cycle behaviour is the same.
- **Channels to splits.** Channel `c` goes to split `c mod N_SPLITS`. The original does not say how channels are assigned.
- **Requantisation.** Arithmetic shift by `SHIFT` and 16-bit saturation. The rounding and scaling of the original are not described.
- **Own choices.** These are not from the original description:
  - ring depth `KH + STRIDE`;
  - the release delay;
  - `BP_GUARD`;
  - the placeholder's host port and its 2-line FIFO;
  - the mean stage's reciprocal multiply;
  - the asynchronous active-low reset.
- **No layer balancing.** The original compiler increases `N_SPLITS` on the slowest layers until a DSP budget is used up. Here each instance's `N_SPLITS` is a parameter, set to 4 everywhere in the top.
- **Depthwise convolution.** There is no dedicated depthwise engine. Depthwise layers run on the Conv2D engine with diagonal weights: correct, but only one split of `N_SPLITS` does useful work.
- **Only the head of ResNet-50 is built.** The top wires the network's first block and classifier, not all 53 convolutions of ResNet-50 or a MobileNet. Those networks are chains of the same stages, with different parameters.
- **Not included.** The PCIe link to the host is replaced by the plain `host_*` and `out_*` ports.
