# GECCO accelerator: a single graph convolution over a batch of vectorised images

This RTL runs inference for a very small grayscale image classifier, one batch at a time.
Each image is flattened into one long vector and mapped to a short feature vector by one
fully connected layer. A single graph convolution then treats the images of the batch as
the nodes of a graph. Next comes a "batch-wise attention" step, in which every image gets a
weighted mean of all the images in the batch. A residual connection, a final fully
connected layer and a softmax complete the model.

There is no convolution over the image grid, so nearly all of the work is one matrix product:
the batch (B × P pixels) times the first weight matrix (P × D). The accelerator is therefore
built as one vector datapath shared by every layer. A small sequencer runs the model layer by
layer as a list of kernel calls, and every tensor (images, weights and intermediates) stays
in an on-chip buffer from load to result.

The reference configuration is the MSTAR radar-target setup:
- batch B = 64, images of 128 × 128 (P = 16384 pixels), feature length D = 86, C = 10 classes;
- a 200 MHz clock, with three independent instances, one per super logic region (SLR) of an
  Alveo U200-class FPGA.

At that size one instance finishes a batch in **1,070,144 cycles (5.35 ms)**, so the three
instances together classify **35.9 images/ms**. The published FPGA figures are 5.65 ms and
33.98 images/ms.

## The model as a program

| # | kernel call | computes | unit |
|---|---|---|---|
| 1 | `OP_MM` | T1 = X1 · W1 (B×P times P×D) | matrix multiplication |
| 2 | `OP_ADD` row-broadcast | T1 += b1 | matrix addition |
| 3 | `OP_ACT` ReLU | X2 = ReLU(T1) | activation |
| 4 | `OP_MM` | T2 = A · X2 (A is B×B, all ones for the model) | matrix multiplication |
| 5 | `OP_MM` | T3 = T2 · W2 | matrix multiplication |
| 6 | `OP_ACT` sigmoid | T3 = σ(T3) | activation |
| 7 | `OP_BN` | T3 = T3 · scale + shift | batch normalisation |
| 8 | `OP_POOL` | X4 = pairwise max, D → ⌊D/2⌋ | max pooling |
| 9 | `OP_MMT` | S = X4 · X4ᵀ | matrix multiplication |
| 10 | `OP_ACT` sigmoid | S = σ(S) | activation |
| 11 | `OP_ROWSUM` | r = row sums of S | matrix multiplication |
| 12 | `OP_MM` | Q = S · X4 | matrix multiplication |
| 13 | `OP_EW` row divide | X5 = Q / r | elementwise |
| 14 | `OP_ADD` | X6 = X5 + X4 | matrix addition |
| 15 | `OP_MM` | L = X6 · Wfc | matrix multiplication |
| 16 | `OP_ADD` row-broadcast | L += bfc | matrix addition |
| 17 | `OP_ROWMAX` | m = row maxima of L | max pooling unit |
| 18 | `OP_ADD` subtract, column-broadcast | E = L − m | matrix addition |
| 19 | `OP_ACT` exp | E = exp(E) | activation |
| 20 | `OP_ROWSUM` | s = row sums of E | matrix multiplication |
| 21 | `OP_EW` row divide | probabilities = E / s | elementwise |
| 22 | `OP_END` | | |

This program is not stored in the RTL. The host loads it into the instruction memory
(`instr_t` in `gecco_pkg`) together with the buffer addresses it chose for each tensor. The
testbench package `gecco_model_pkg` shows a complete layout and program for any (B, P, D, C).
The same hardware therefore runs other sizes, or an adjacency matrix other than all ones,
without a change to the RTL.

Some notes on the mapping:
- Dropout is the identity at inference, and a second ReLU after the first changes nothing, so
  X3 = X2.
- Batch normalisation uses its inference form: the trained mean, variance, γ and β are folded
  offline into a per-feature `scale` and `shift` row.
- The attention weight is normalised per row, with every row of σ(X4X4ᵀ) divided by its sum.
  Because X4X4ᵀ is symmetric, row sums and column sums are the same numbers. The division is
  applied after the product (call 13), which gives the same result and needs only one
  reciprocal per row.
- Softmax subtracts the row maximum before the exponential, so that exp never overflows.

## Vectors, lanes and the buffer layout

Everything is built around a **vector** of `LANES = 86` numbers. A vector is:
- one word of the memory buffer;
- one operand of a compute unit;
- one result written per cycle.

A matrix is stored row-major. Each row is padded to a whole number of words (its *stride*)
and the padding lanes are kept at zero. The compute unit zeroes every output lane at or
beyond the call's column count, so later calls can rely on the padding being zero.

86 is the MSTAR feature length, so the first layer's output row is exactly one word. That
makes call 1 take B × P = 1,048,576 cycles, one multiply-accumulate per lane per cycle, which
is 98% of the run. The lane count is this design's choice, picked to land near the published
latency; the source gives no datapath width. Changing `LANES` in `gecco_pkg` rescales
everything else.

`memory_buffer` holds `DEPTH = 32768` words (86 × 16 bits each, 45 Mbit), which is enough
for the whole MSTAR working set of 29,509 words:

| tensor | words |
|---|---|
| X1 (64 × 191 words) | 12,224 |
| W1 (16,384 × 1 word) | 16,384 |
| everything else | 901 |

The buffer has three synchronous read ports (A, B, C) and one write port. A read returns the
old word if it hits the address being written in the same cycle. The host loads the buffer
and reads it back through read port A and the write port, and only while the instance is idle.

The 224 × 224 chest X-ray configuration (D = 112, 2 classes) does **not** fit at the default
depth. W1 alone needs 50,176 × 2 words, so it would need `DEPTH = 2**18`. Its shape
is simulated with the images cut to 16 × 16 pixels.

## Number format

All stored values are signed Q8.8 (`DATA_W = 16`, `FRAC = 8`):
- products are summed at 48 bits (`ACC_W`), shifted right arithmetically by `FRAC`, and
  saturated to ±127.996;
- every unit saturates rather than wraps, and `gecco_accel` counts saturating writes in
  `sat_events`.

The source does not state its arithmetic (it quotes its peak rate in FLOPS, which suggests
floating point), so this fixed-point format is a departure that affects accuracy. Two
consequences for a model with 16,384 inputs:
- W1 must be scaled so that the first layer's sums stay inside ±128;
- the sigmoid in the graph convolution loses detail once its input leaves about ±5.

## The kernel units

`compute_unit` holds six units, all of them combinational or nearly so, and picks the result of
the unit that the step's opcode names:

- **`matmul_unit`** has three modes.
  - `OP_MM` is output-stationary. Each cycle one scalar a[i][k] (picked from lane `a_lane` of
    the A word) multiplies a whole B row chunk into 86 per-lane accumulators. One output word
    is done after K steps.
  - `OP_MMT` multiplies an A row chunk by a B row chunk lane by lane and reduces the products
    with an adder tree. Lanes at or beyond `k_lim` are masked. The scalar results are collected
    into an assembly register at `out_lane`, which is written out on `flush` (a full word, or
    the end of the row).
  - `OP_ROWSUM` is `OP_MMT` with B set to ones.
- **`matadd_unit`** performs saturating add or subtract. The control unit supplies B as a full
  matrix, as one row broadcast down the columns (biases), or as one value per row (`BM_COL`:
  lane 0 of a column vector, copied to every lane).
- **`activation_unit`** has three functions:
  - ReLU;
  - sigmoid, as the PLAN piecewise-linear approximation (slopes 1/4, 1/8, 1/32, then
    saturation at |x| ≥ 5);
  - exp, as 2^(x·log₂e): the integer part is a shift and the fraction uses
    2^f ≈ 1 + 0.6565 f + 0.3435 f² (exact at f = 0 and 1, error under 0.3%).
- **`batchnorm_unit`** computes x · scale + shift per feature. Scale and shift come from two
  consecutive rows of the buffer, on ports B and C.
- **`maxpool_unit`** has two jobs.
  - Pooling: the even and odd words of a row (ports A and C) are pooled pairwise into one word.
    The first 43 output lanes come from the even word and the rest from the odd word.
  - Row maximum: a maximum is carried across the chunks of a row, with lanes beyond `k_lim`
    ignored, for the softmax.
- **`elementwise_unit`** has two operations.
  - Hadamard product.
  - Row division: the reciprocal 2^(2F+16) / d is formed once from lane 0 of B, and the 86
    lanes are multiplied by it. A zero divisor gives zero.

## Control unit and timing

The `control_unit` runs the program from address 0. For each instruction it walks one of
three loop nests and issues one step per cycle. The step cost per call is:

| calls | loop nest | steps |
|---|---|---|
| `OP_MM` | rows i, output words j, inner index k | M · ⌈N/86⌉ · K |
| `OP_MMT`, `OP_ROWSUM`, `OP_ROWMAX` | rows i, output columns n, inner words | M · N · ⌈K/86⌉ |
| all others | rows i, output words j | M · ⌈N/86⌉ |

The pipeline, cycle by cycle:

| cycle | what happens |
|---|---|
| S0 | the control unit drives the three read addresses |
| S1 | the buffer returns data, and the registered `step_t` descriptor arrives with it |
| S2 | the compute unit registers the result and the write |

After each call's last step the sequencer waits 2 drain cycles, so the next call may read
what the last one wrote. Each call also costs one fetch cycle. Over the run:

**cycles = 1 + Σ over calls (1 + steps + 2)**

For MSTAR:

| part | cycles |
|---|---|
| call 1 (first fully connected layer) | 1,048,576 |
| A · X2 | 4,096 |
| · W2 | 5,504 |
| X4 · X4ᵀ | 4,096 |
| S · X4 | 4,096 |
| everything else, including fetch and drain | 3,776 |
| **total** | **1,070,144** |

`cycles`, `busy`, `done` and `cur_op` are visible at the top.

## Instances: `gecco_accel` and `gecco_top`

`gecco_accel` is one complete instance: the control unit, the memory buffer and the compute
unit, plus the host port.

`gecco_top` places `NUM_INST = 3` instances side by side with no shared logic. Each has its own
host port, program port, start and status, as arrays indexed by instance. The host must use an
instance only while it is idle. An assertion in `gecco_accel` flags a host write during a run.

The host computer, the PCIe link and the DDR memory that the batch comes from are outside this
RTL. Their traffic is the `host_*` and `imem_*` ports.

## Where this departs from the published design

- The accelerator is hand-written RTL. The original was generated from a parameterised
  high-level-synthesis template, whose internal structure is not described. The kernel-unit
  split, the layer-by-layer execution and the single data load follow the original. The
  lanes, pipeline, instruction format and buffer ports are this design's own.
- Q8.8 fixed point instead of (probably) floating point. Sigmoid and exp are approximated.
- The graph convolution is σ(A·X3·W2) with a host-loaded A, following the model equations.
  The model's text also names a residual-graph-convolution "backbone" that it does not
  describe; that variant is not built.
- The first layer needs 16,384 × 86 weights. The published parameter count (about 5·10⁴) is
  lower than that; the equations were followed.
- The buffer is sized for MSTAR (32,768 words). The chest X-ray model needs a larger `DEPTH`.
- Latency is 5.35 ms against 5.65 ms published. The 0.3 ms gap is within what an unknown
  datapath and clock schedule can explain. It is a consequence of choosing 86 lanes, not a
  reproduction.

## Simulating

Each `tb/tb_<module>.sv` checks one module against values computed independently in the
testbench. Each ends by printing `TB_RESULT checks=N failures=M` and has a cycle watchdog.

`tb/gecco_ref_pkg.sv` is a golden model of the same fixed-point arithmetic (with real-valued
sigmoid and exp checked within a tolerance). `tb/gecco_model_pkg.sv` builds layouts,
programs, random models and reference results.

The whole-design testbenches are:
- `tb_gecco_accel`: three model sizes on one instance, the last with the chest X-ray shape
  (B = 64, D = 112, C = 2) on 16 × 16 images.
- `tb_gecco_top`: all three instances at a small size. It counts each kernel type, saturation,
  ReLU clipping, multi-word rows and concurrent busy cycles.
- `tb_gecco_full`: the default-parameter top on the full MSTAR size. It checks logits,
  probabilities and the exact cycle count, and prints latency and throughput. It takes about
  half a minute.

Example with plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/gecco_pkg.sv tb/gecco_ref_pkg.sv tb/gecco_model_pkg.sv rtl/*.sv \
  tb/tb_gecco_full.sv --top-module tb_gecco_full -o sim
./obj_dir/sim
```

Unit testbenches need only `rtl/gecco_pkg.sv`, the module under test (and its sub-units),
and `tb/gecco_ref_pkg.sv` where they use the golden model.
