# SYCore: a systolic DNN accelerator built from one CORDIC datapath

The idea behind this accelerator is that one small shift-and-add circuit, the
CORDIC micro-rotation, can do all of the arithmetic a neural-network layer
needs. Run in *linear rotation* mode, a chain of CORDIC stages computes
`y + x·z`, which is a multiply-accumulate. The same stage run in *hyperbolic
rotation* mode gives `cosh a` and `sinh a`, and so `e^a`. Run in *linear
vectoring* mode it gives a quotient. From these pieces come tanh
(`sinh/cosh`), sigmoid (`e^a / (1 + e^a)`) and softmax (`e^a_j / Σ e^a`).
ReLU is a sign test.

Every processing element (the *RPE*, reconfigurable processing element)
therefore has no multiplier, no divider and no lookup table for its
activation functions. The RPEs are tiled into a 32×32 output-stationary
systolic array (*SYCore*) made of 4×4 sub-blocks. A controller (*CAESAR*)
takes one instruction per layer tile from a host processor, moves the
operands between the shared L2 memory and the array, and reports when the
layer is done.

This document describes the SystemVerilog model of that design: how each
part works, its timing, which choices it makes where the published
description is silent, and where it departs from that description.

## Number formats

| quantity | width | format | notes |
|---|---|---|---|
| activations, weights, biases, results | 8 | Q1.6, two's complement, range [-2, 2) | `data_t` |
| accumulator and all CORDIC internals | 20 | 12 fraction bits, range [-128, 128) | `acc_t` |

An 8-bit operand is widened to the accumulator format by a shift of 6. A
result goes back to 8 bits by an arithmetic shift of 6, saturating to
[-128, 127]. All right shifts truncate toward −∞. The 8-bit width is the
published one. The split between integer and fraction bits, and the 20-bit
accumulator, are this design's choices: 2×8 bits of product plus 4 guard bits.

All shared constants live in `rtl/sycore_pkg.sv`. These include the
hyperbolic angle table `round(atanh(2^-i)·2^12)` for i = 1..5 (2250, 1046,
515, 256, 128) and the start value `x0 = round(2^12 / Π sqrt(1 − 2^-2i)) = 4935`.
With `x0` the hyperbolic iterations end at exactly `cosh a` and `sinh a`,
with no gain correction afterwards.

## The CORDIC stage (`cordic_stage`)

One combinational micro-rotation with shift `i` and angle constant `E`:

| mode | select | direction d | update |
|---|---|---|---|
| linear rotation (MAC) | — | sign of z | `y += d·(x>>i)`, `z −= d·E`, x unchanged |
| hyperbolic rotation | `hyp_sel` | sign of z | `x += d·(y>>i)`, `y += d·(x>>i)`, `z −= d·E` |
| linear vectoring (divide) | `div_sel` | signs of x and y differ | `y −= d'·(x>>i)`, `z += d'·E` |

Here `d` is ±1 and `d'` is the vectoring direction that drives y toward 0.
Starting from `(den, num, 0)`, vectoring ends with `z ≈ num/den` for
|num/den| < 2.

One conflict in the source had to be settled. Its iteration table gives the
linear-mode x update as `x − d·y·2^-i`. Its general formula with m = 0, and
its description of the MAC, leave x unchanged. Only the second form computes
`y + x·z`, so that form is used.

## The MAC pipeline (`cordic_mac_pipe`)

There are five linear stages, one register after each. Stage k uses shift k
(k = 0..4) and angle 2^-k. Because the shift is fixed per stage, the shifters
are just wiring.

- **Inputs:** `x` is the activation, `z` is the weight, and `y` is the value
  to add to.
- **Output:** `y + x·z`, five enabled clocks later.
- **Rate:** one new product every clock.
- **Accuracy:** five stages resolve the weight to 2^-4. So a product carries
  an error of up to about |x|·2^-4, which is the accuracy the five-stage
  choice trades for area.
- **Tags:** `valid`, `first` and `last` travel alongside the data, so the RPE
  knows which beat starts and which ends a dot product.
- **Enable:** `en` freezes the whole pipeline. This is how a disabled
  sub-block is stopped.

## The activation unit (`rpe_af`)

The unit holds one more CORDIC stage, which it runs iteratively:
hyperbolic for 5 clocks (i = 1..5), then vectoring for 4 clocks (i = 0..3).

| function | path | result after the sum is offered |
|---|---|---|
| ReLU | sign test, registered | 1 clock |
| tanh | hyperbolic 5, divide `sinh/cosh` 4 | 9 clocks |
| sigmoid | hyperbolic 5, divide `e/(1+e)` 4 | 9 clocks |
| softmax over n values | hyperbolic 5 per value into a FIFO and a running sum, then one divide of 4 per value | first result 4 clocks after the last exponent, then one result every 4 clocks |

The first hyperbolic iteration runs in the same clock that the sum is
accepted, which is how tanh and sigmoid meet the 5 + 4 = 9 clock budget.

Two limits follow from using exactly five hyperbolic iterations:

- **Input range.** Without the repeated iterations of textbook hyperbolic
  CORDIC, the result is only accurate for |a| up to about 1.02 (the sum of the five angles). Beyond that,
  tanh and sigmoid saturate early and softmax flattens. The testbenches check
  to within 0.16 of the real function inside that range. They check bit-exact
  outside it against a model of the same iterations.
- **Input spacing.** The unit needs 5 clocks per value. A sum offered while it
  is busy is refused. The refusal sets a sticky `overrun` flag, which the
  controller turns into a layer error. For softmax, each of the n dot products
  must therefore be at least 5 words long.

## The processing element (`rpe`)

An RPE has four parts:

1. **Forwarding registers.** Activations and their tags pass one register per
   hop toward the east. Weights and biases pass one register per hop toward
   the south.
2. **A MAC pipeline.** It is fed by the incoming activation and weight. On the
   `first` beat of a dot product, `y` is loaded with the bias. On every other
   beat, `y` is 0.
3. **An accumulator.** It adds the pipeline outputs. On the `last` beat it
   hands the complete sum to the activation unit.
4. **The activation unit**, described above.

A small state machine (idle → init → mac → af → done) follows the pipeline's
progress. `done` stays high until the next `start`. Results leave on
`res_valid/res_data/res_idx`. `res_idx` numbers the softmax outputs.

For a dot product of k beats, the result is ready k + 6 clocks after the
first beat for ReLU, and k + 14 clocks after it for tanh and sigmoid.

## Sub-blocks and the array (`sycore_subblock`, `sycore_array`)

A sub-block holds 4×4 RPEs and three kinds of buffer:

- an input buffer with one lane per RPE row;
- a weight buffer with one lane per RPE column;
- a bias register per column.

Each buffer lane is `BUF_DEPTH` = 4608 words deep. That is the longest dot
product of VGG-16, a 3×3 kernel over 512 channels.

A stream engine reads the buffers once `stream_start` arrives:

- Lane l starts `skew_base + l` clocks after `stream_start`. This is the
  usual systolic skew.
- Each lane sends `stream_total` words.
- The words are tagged `first` and `last` every `stream_len` words.

The RPE results land in a small output buffer (the L1 of the source). It holds
16 entries per RPE and is read combinationally.

The array arranges the sub-blocks in an 8×8 grid and connects neighbours.
Each sub-block chooses between its own buffer and its neighbour's outputs:

- **Chained mode** (what the controller uses). Only the west column reads
  input buffers, and only the north row reads weight buffers. Every other
  sub-block takes the activations of its west neighbour and the weights of its
  north neighbour. The skew base is the global row or column index, so the
  whole array behaves as one 32×32 output-stationary systolic array.
  RPE (r, c) computes `act(A[r]·B[c] + bias[c])`.
- **Parallel mode.** Every sub-block works from its own buffers as an
  independent 4×4 array.

`sb_en` enables each sub-block. A disabled sub-block's pipelines are frozen,
and `done_all` ignores it. The source says: "When any sub-block is not in
use, all sub-blocks are deactivated". This design reads that as "unused
sub-blocks are deactivated". Read literally, no partly filled layer could run.

## CAESAR, the controller (`caesar`)

CAESAR has five parts. Their names and duties come from the source; how each
works is this design's own.

- **ISA register / DNN parameters.** Hold the accepted instruction and the
  sizes derived from it.
- **Scheduler / PE select.** Rejects a tile that does not fit. Enables only
  the sub-blocks that the m × n tile covers.
- **Data fetcher / address mapper.** Streams the operands out of L2 into the
  buffers with pipelined in-order reads, one word per clock:
  - A goes into the west-column input buffers;
  - B goes into the north-row weight buffers;
  - the bias goes into the north-row bias registers.
- **Data-flow FSM.** Pulses `layer_start` when it accepts an instruction.
  It also pulses `dnn_start` when that instruction is the first of a network,
  that is, the first after reset or after a last layer. It starts the array
  and waits for `done_all`. Then writes
  the results back to L2 and pulses `layer_done`. On an instruction marked
  last, it also raises `dnn_done`, which stays high until the next
  instruction.
- **Flags.** `idle`, `busy` and `error`. `compute_cycles` counts the compute
  phase of the last tile, and `active_rpes` gives the number of RPEs in use.

### Instruction (`caesar_instr_t`)

| field | bits | meaning |
|---|---|---|
| `last_layer` | 1 | raise `dnn_done` when this tile ends |
| `af_sel` | 2 | 0 ReLU, 1 tanh, 2 sigmoid, 3 softmax |
| `m`, `n` | 6 each | tile rows and columns, 1..32 |
| `k` | 13 | dot-product length of one pass |
| `passes` | 5 | number of dot products per RPE; the softmax length, 1..16 (1 for the other functions) |
| `a_base` | 20 | A: m rows of k·passes words, row after row |
| `b_base` | 20 | B: n columns of k·passes words, column after column |
| `bias_base` | 20 | n bias words |
| `out_base` | 20 | results: word (r·n + c)·passes + j |

The instruction handshake is `instr_valid`/`instr_ready`. `instr_ready` is
high only when CAESAR is idle.

For softmax, RPE (r, c) computes the passes dot products `A[r][j]·B[c][j] + bias[c]`,
j = 0..passes−1, and normalises their exponentials against each other.

CAESAR raises `error`, writes nothing and returns to idle in these cases:

- an instruction with m, n, k or passes of 0, or too large;
- passes > 1 with a function other than softmax;
- k·passes larger than a buffer lane.

If an RPE overruns during the tile, CAESAR lets the array drain for
kt + ROWS + COLS + 64 clocks (kt = k·passes), raises `error`, and skips the
write-back.

### Memory port

A request is taken every clock:

- `l2_req` with `l2_we` = 1 writes `l2_wdata`.
- `l2_req` with `l2_we` = 0 is a read.

Read data return on `l2_rvalid`/`l2_rdata` in order, after any latency. The
AXI interconnect and the L2 cache of the source system are outside the model.

## Timing of a tile

For an m × n tile with kt = k·passes:

| phase | clocks |
|---|---|
| decode and schedule | 3 |
| fetch | (m + n)·kt + n, plus the memory latency once per operand |
| stream and MAC | kt + m + n + 5 (skew across the array, 5 MAC stages) |
| activation | 1 (ReLU), 9 (tanh, sigmoid), 9·passes (softmax) |
| write-back | m·n·passes |

The source reports that an RPE produces its first output after 45 clocks.
This model does not reproduce that number, because the source does not say
what it is made of. Here the first result leaves the corner RPE k + 6 clocks
(ReLU) or k + 14 clocks (tanh, sigmoid) after its first beat.

With a single 8-bit memory port, the fetch phase dominates. For a full 32×32
tile of dot length 4608, the fetch takes about 300 000 clocks and the compute
takes about 4 700. The source's execution times assume operand delivery that
keeps the array busy. Delivering operands that fast is not modelled here.

## What is outside this model

- **Pooling, flatten and residual adds.** These are done by the host, as in
  the source system.
- **Pruning, sparse formats, quantisation and tiling.** The source lists these
  among the scheduler's duties but does not describe how they work. Here the
  host issues one instruction per dense tile.
- **The extended activation core** (GELU, SELU, Swish). The source mentions it
  as an option but does not give its constants.
- **Softmax over more than 16 values.** The FIFO depth is a parameter
  (`SM_DEPTH`); the source gives no number. Softmax over 100 classes (CIFAR-100) or over a
  transformer sequence needs a larger FIFO.
- **Dot products longer than 4608 words** (e.g. an FC layer with 9216
  inputs). The array cannot add partial sums from two tiles.

## Files and simulation

`rtl/` holds one module per file. `sycore_pkg.sv` must be compiled first.

| file | contents |
|---|---|
| `sycore_pkg.sv` | formats, constants, instruction type |
| `cordic_stage.sv` | one micro-rotation, three modes |
| `cordic_mac_pipe.sv` | five-stage MAC pipeline |
| `rpe_af.sv` | activation unit |
| `rpe.sv` | processing element |
| `sycore_subblock.sv` | 4×4 sub-block with buffers |
| `sycore_array.sv` | the array of sub-blocks |
| `caesar.sv` | controller |
| `sycore_top.sv` | controller plus array |

`tb/` holds the following:

- `cordic_ref_pkg.sv`: a bit-exact reference model of every operation, plus
  real-valued functions for tolerance checks.
- `l2_model.sv`: a behavioural L2 memory with a configurable read latency.
- One self-checking testbench per module. `tb_sycore_top` runs a chain of
  layers on an 8×8 array. It covers all four functions, a partly used array,
  a layer fed by the previous layer's results, both error cases and
  `dnn_done`. `tb_sycore_top_full` runs the design at its full size: 32×32
  RPEs and 4608-word buffers, with one tile shaped like VGG-16's first layer.
- `tb_workloads` runs layer shapes of the target networks on an 8×8 array
  with full 4608-word buffers: a VGG-16 3×3×512 convolution (k = 4608), a
  VGG-16 FC7 tile (k = 4096), a LeNet-5 convolution with tanh, and the
  LeNet-5 10-class softmax output layer.

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops. For
example:

```
verilator --binary --timing -Irtl -Itb rtl/sycore_pkg.sv tb/cordic_ref_pkg.sv \
  rtl/cordic_stage.sv rtl/cordic_mac_pipe.sv rtl/rpe_af.sv rtl/rpe.sv \
  rtl/sycore_subblock.sv rtl/sycore_array.sv rtl/caesar.sv rtl/sycore_top.sv \
  tb/l2_model.sv tb/tb_sycore_top.sv --top-module tb_sycore_top
./obj_dir/Vtb_sycore_top
```

The simulation is two-state. Every register that is read is reset.

At the full size the C++ build of the array is large. It takes about
15 minutes single-threaded; pass `-j` to speed it up. The simulation itself
takes seconds. For quick experiments, override `ROWS`,
`COLS` and `BUF_DEPTH` on the top, as `tb_sycore_top` does.

## How far to trust it

- **Bit-exact agreement.** Each module agrees bit for bit with an independent
  reference model of the same fixed-point arithmetic. This was checked on
  random and corner-case operands, at every level from a single stage to the
  complete accelerator.
- **Mistakes are caught.** Each testbench was run against a copy of its
  module with one deliberate mistake. Examples: a wrong sign, a missing skew,
  a wrong sigmoid denominator, a misrouted buffer write. Each testbench failed.
- **Numerical accuracy.** This is limited by the choices the source made: five
  MAC stages and five hyperbolic iterations. It is not limited by the RTL.
- **Not measured here.** The cycle counts of the source's tables, and its
  power and area figures, are not reproduced or measured.
