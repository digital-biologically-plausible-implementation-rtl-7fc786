# In-memory binarized neural network on differential resistive memory

A binarized neural network (BNN) has weights and neuron values that are only
+1 or -1. A neuron then needs no multiplier: the product of weight and input
is an XNOR of two bits, the sum over inputs is a count of ones (POPCOUNT),
and the activation is the sign of that count minus a learned threshold:

    A_j = sign( POPCOUNT_i( XNOR(W_ji, X_i) ) - T_j )

This RTL implements an accelerator in which the weights never leave the
memory that holds them. Each weight is stored as a complementary pair of
hafnium-oxide resistive devices (a "2T2R" cell). The sense amplifier that
reads the pair also receives the input bit, so its output is already the
XNOR. Next to each memory block sits a small counter, and a few adders and
a subtractor finish the neuron. No error-correcting code is used: the
differential cell makes bit errors rare, and BNNs tolerate the errors that
remain.

The design follows the architecture of Hirtzlin et al., "Digital
Biologically Plausible Implementation of Binarized Neural Networks with
Differential Hafnium Oxide Resistive Memory Arrays". The structure, sizes
and the two operating configurations come from that paper. The interfaces,
encodings, widths, pipeline and control are this implementation's own
choices. They are listed in the section "Where this RTL departs from or adds
to the paper".

## The differential cell and the XNOR sense amplifier

A resistive device is either in a low resistance state (LRS) or a high
resistance state (HRS). Devices vary from one programming pulse to the next.
A single-device memory compares the device with a fixed reference, so an
HRS that came out low or an LRS that came out high gives a wrong bit. In the
2T2R cell a bit is a *pair* of devices on bit lines BL and BLb:

| stored bit | BL device | BLb device |
|-----------:|-----------|------------|
| 1 (+1)     | HRS       | LRS        |
| 0 (-1)     | LRS       | HRS        |

Reading compares the two devices with each other. The bit is wrong only when
the device meant to be in LRS ends up more resistive than its partner meant
to be in HRS. That is much rarer than either device crossing a fixed
reference.

The comparison is made by a precharge sense amplifier (PCSA), one per column.
While SEN is low, both outputs are precharged high. When SEN goes high, both
branches discharge through the devices. The branch with the lower resistance
falls first, and the cross-coupled latch settles. Four extra transistors,
driven by the input X and its complement, either connect BL and BLb to the
two branches straight or cross them over. Crossing the branches inverts the
comparison, so the latched output is XNOR(X, stored bit). The
multiplication costs nothing beyond the read.

`pcsa_xnor` and `oxram_2t2r_array` are **behavioural models** of these
analog parts, not synthesizable logic:

* The array keeps one resistance code (8 bits, in kilo-ohms) per device, and
  a "formed" flag. A never-formed device reads as 255 (no conduction). SET,
  RESET and FORM act on one device per clock edge. The model has no device
  physics, so the caller supplies the resistance the pulse leaves behind on
  `prog_r`. This is where a testbench injects variability and bit errors.
  SET/RESET on an unformed device does nothing.
* The PCSA compares the two codes ideally. A tie resolves to 0. The real
  amplifier's sensing errors at small resistance ratios are not modelled.

## The kilobit block (`memory_block`)

One block is 32 x 32 pairs (2048 devices). It contains a row decoder that
drives one word line, a PCSA per column, and two column decoders. The
decoder above the amplifiers puts one latched output on the block's single
read pin. The decoder below the array gives access to one BL/BLb pair, for
programming and for direct measurement. Operations, one per clock:

| operation | control | result |
|-----------|---------|--------|
| XNOR row read | `rd_en`, `row_addr`, inputs `x[31:0]` | `xnor_q` and `row_valid` on the next cycle |
| plain read | XNOR read with `x` all ones | `xnor_q` = stored row; `rd_bit` = bit `col_addr` |
| program one device | `prog_op` FORM/SET/RESET, `prog_side`, `prog_r`, row/col | on the clock edge |
| bypass | `bypass` | PCSAs held in precharge; `meas_r_bl`/`meas_r_blb` show the pair's resistances |

The bypass reproduces a test feature of the fabricated chip. There, the
amplifiers can be switched off so that external instruments measure each
device's resistance. Here the measured values are simply the model's codes.

## One basic cell, one neuron slice

A `basic_cell` is a block plus its counter (`popcount`). The partial
popcount of a row (0..32) is available one cycle after the read. The paper
calls these counters "five-bit", but 33 values need six bits, so the counter
is 6 bits wide. The cell also holds an 11-bit accumulator and a
`sign_activation` unit. Both are used only in the sequential-to-parallel
configuration below.

Activations use +1 -> bit 1 and -1 -> bit 0, and sign(0) = +1. A neuron
therefore outputs 1 exactly when its popcount is at least its threshold.
Thresholds are unsigned 11-bit words (0..1025). A threshold of 0 forces +1,
and one above the largest possible count forces -1. A batch-normalised
network folds each neuron's normalisation into its integer threshold.

## The array and its two configurations (`bnn_top`)

`bnn_top` is an N x M matrix of basic cells (default 3 x 3, 32 x 32 pairs
each, as in the paper's architecture drawing). Below each column of cells
sit a popcount tree and a neuron unit, and there is a shared threshold
memory. A controller reads the *same row address in all nine blocks* every
clock cycle. The two configurations differ in what a row holds and where the
popcount goes. `mode` selects the configuration at `start`, and `n_steps`
(1..32) sets the number of rows read.

### Parallel to sequential: M neurons per cycle

For layers of up to 32·N = 96 inputs and 32·M = 96 outputs.

* Inputs: cell row i receives inputs `x_par[i]` = X[32i .. 32i+31]. Every
  cell in that row receives the same inputs.
* Weights: row r of the block in cell (i, j) holds the weights from inputs
  32i..32i+31 to output neuron **32j + r**.
* Each cycle, every cell counts its 32 XNORs. The popcount tree of column j
  adds the N partial counts (ripple chain, 0..96). The neuron unit subtracts
  threshold word 32j + r and registers the sign.
* Output: `act_par[j]` is neuron 32j + r, flagged by `par_valid` with
  `par_row = r`. M neurons come out per cycle, and a full 96-neuron layer
  takes 32 cycles.

### Sequential to parallel: one neuron per cell

For layers of up to 32·32 = 1024 inputs and N·M = 9 outputs.

* Inputs are streamed 32 at a time. In a cycle with `in_chunk_req = 1`, the
  caller must drive `x_seq` with chunk `in_chunk_idx` (inputs
  32k .. 32k+31). The array asks for chunks 0, 1, 2, ... in order, one per
  cycle. All cells receive the same chunk.
* Weights: row k of cell (i, j) holds that cell's neuron's weights for
  chunk k.
* Each cell adds its partial count into its own accumulator. The popcount
  trees are gated off: their inputs are forced to zero, so they do not
  toggle.
* After the last chunk, `seq_valid` (with `done`) flags `act_seq[i][j]`,
  the sign of accumulator minus threshold word 32j + i.

### Timing

```
cycle      s        s+1     s+2     s+3    ...  s+n    s+n+1   s+n+2
start      1
rd (row)            0       1       2      ...  n-1
PCSA latch                  row 0   row 1  ...         row n-1
result                              row 0  ...                 row n-1, done
busy       .        1 ......................................... 1
```

The accumulators are cleared in the start cycle. Each row read is followed
by the PCSA latch, then by the activation register (parallel) or the
accumulator (sequential). So every result appears two cycles after its read,
at one row per clock. A layer of n rows takes n + 2 cycles from start to
done. `start` is ignored while `busy`, or when `n_steps` is 0 or above 32.

### Host access between layers

While `busy` is low, one block at a time, selected by `host_bi`/`host_bj`,
is reachable at `host_row`/`host_col`:

* Program one device with `prog_op`, `prog_side` and `prog_r`. Programming
  during a run is an assertion failure.
* Read a row with all inputs at +1 (`host_rd`). The stored bit of column
  `host_col` appears on `rd_bit` in the next cycle.
* Measure the pair with `bypass`, which drives `meas_r_bl`/`meas_r_blb`.

Thresholds are written with `thr_we`/`thr_waddr`/`thr_wdata`. Writes during
a run are dropped.

To store weight w at a pair: FORM both devices once, then RESET the BL
device and SET the BLb device for w = 1, or the opposite for w = 0. The
programming pulse parameters (compliance current, RESET voltage, pulse
width) are analog and live outside this RTL.

## What fits

At the default size the array stores 9 x 1024 = 9,216 weights. A larger
network is run in passes, reprogramming the weights between passes, or needs
a larger N x M. The sequential configuration accepts any layer of up to 1024
inputs, at 9 neurons per pass.

An input count that is not a multiple of 32 leaves unused positions in the
last chunk. Drive them at +1 and give them weights alternating +1/-1. They
then add a known number of ones, which is added to the threshold.

| network | fits at defaults? |
|---------|-------------------|
| one kilobit array programmed with a test pattern or a layer's weights | yes: one block |
| MNIST MLP with two hidden layers of 1024 | not at once: the 1024x1024 layer alone needs 1,048,576 weights (N = M = 32 would hold it in the parallel configuration). It runs in 114 + 114 + 2 passes. |
| ECG CNN (12 channels, 64 filters, kernels 13..5) | not at once: the first layer needs 156 inputs x 64 outputs = 9,984 weights. It runs in 8 passes per output position. |
| CIFAR-10 CNN, AlexNet | no (AlexNet has ~61 M weights); CIFAR channel counts are not known |

The parameters `N`, `M` and `NSZ` of `bnn_top` scale the matrix. `N` must
not exceed `NSZ`, because of the threshold map.

## Where this RTL departs from or adds to the paper

* Popcount counters are 6 bits, not the paper's 5, since a 32-bit row can
  count to 32.
* The bit encoding, sign(0) = +1, the threshold width, and the threshold
  memory as a parallel-read register file (the paper says only "a separate
  memory array") are this design's own choices.
* The weight and threshold maps (neuron 32j + r in row r of column j) are
  also this design's own. So are the host port and the start/busy/done
  handshake with its two-cycle pipeline.
* The sequential configuration is only described in words in the paper, not
  drawn. Here every cell receives the same input chunk, and the threshold is
  applied inside each cell.
* "Only activated in this configuration" for the popcount tree is
  implemented as operand isolation.
* The memory array and sense amplifier are behavioural, as in the original
  work. The models ignore sensing errors at small resistance ratios, read
  time, and the analog programming conditions. Bit errors exist only where
  the caller programs overlapping resistances.
* Not built: the analog programming drivers, pads and laboratory
  instruments. `prog_r` and `meas_r_*` stand where they connect.
* Energy and timing figures of the original work (for example 25 nJ per
  MNIST digit) are not reproduced. Nothing in this RTL measures energy.

## Verification

Every module has a self-checking testbench in `tb/` named `tb_<module>`.
Each one compares against an independently computed reference and ends by
printing `TB_RESULT checks=<n> failures=<n>`. `tb_bnn_top` runs the top at
its default size with no parameter overrides. It:

* forms and programs all 18,432 devices, with about 1 % of pairs given
  overlapping resistances, i.e. real bit errors;
* checks single-bit reads and bypass measurements;
* runs a 96 -> 96 layer in the parallel configuration and a 1024 -> 9 layer
  in the sequential one;
* checks every activation against sign(popcount - T), computed from the
  resistances actually programmed;
* checks that each layer takes n + 2 cycles;
* counts that every mechanism occurred (both configurations, programming,
  reads, bypass, bit errors, tree gating, start ignored while busy), and
  reports bit errors that flip an activation.

It runs in about 20 seconds.

Two further testbenches run workloads:

* `tb_array_characterisation` programs one kilobit block 100 times with
  alternating checkerboard patterns. Resistances are drawn from overlapping
  LRS/HRS ranges, which are the testbench's own, not measured data. It
  checks every sensed bit against the programmed resistances. It also
  counts the bit errors of the differential read against those that single
  devices would make against a fixed reference. A typical run gives about
  1e-4 versus 1e-1.
* `tb_layer_workloads` runs one complete inference of a 784-1024-1024-10
  binarized MLP (the MNIST network size) layer by layer, in 230 passes with
  reprogramming. Each layer's activations are the next layer's inputs. It
  also runs the 64 filters of the ECG network's first convolution for one
  window. Weights, inputs and thresholds are random, since no trained
  network is included. Every activation is checked.

Simulating with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl -y tb \
          rtl/bnn_pkg.sv tb/tb_bnn_top.sv --top-module tb_bnn_top -o sim
./obj_dir/sim
```

Replace `tb_bnn_top` with any other testbench to test one block. Lint with
`verilator --lint-only -Wall -Irtl -y rtl rtl/bnn_pkg.sv rtl/bnn_top.sv`.
The array model starts unformed, so a simulation must form and program the
devices before reading them.

## Files

`rtl/bnn_pkg.sv` holds the shared types: programming operations, pair side,
configuration, and resistance code. The hierarchy below `bnn_top` is:

```
bnn_top
├── bnn_controller
├── threshold_memory
├── basic_cell  (N x M)
│   ├── memory_block
│   │   ├── row_decoder
│   │   ├── oxram_2t2r_array   (behavioural)
│   │   ├── pcsa_xnor x 32     (behavioural)
│   │   └── column_decoder x 2
│   ├── popcount
│   └── sign_activation
├── popcount_tree (M)
└── sign_activation (M)
```
