# FastWave: an on-chip accelerator for autoregressive dilated-convolution audio generation

WaveNet-style models generate audio one sample at a time. Each new sample is
the output of a deep stack of causal, dilated convolutions whose input is the
sample generated just before it. Evaluated naively, every new sample
recomputes a binary tree of activations, which costs O(2^L) for L layers.
Fast-WaveNet removes that redundancy: every layer keeps a first-in first-out
queue of its own past inputs. The queue is as long as the layer's dilation,
so its oldest entry is exactly the input the width-2 dilated filter needs
from the past. One generation step then costs one pass through the L layers.

This RTL implements that generation loop as a hardware accelerator that keeps
everything on chip: all queues, all kernels and the output layer. It follows
the FastWave design: each layer has its own matrix multiplication engine with
two knobs, `num_parallel_out` (rows processed together) and `num_parallel_in`
(MACs per row). The engine double-buffers chunks of the weight matrix. Its
partial sums are added by a tree reduction. A tanh follows every
convolution. A fully connected layer with arg-max sampling picks the next
sample, and that sample is fed back as the next input.

Everything is SystemVerilog-2017. It is checked with Verilator (lint and
simulation) and with the slang front end of Yosys.

## The network it runs

Defaults (all parameters of `fastwave_top`, from `rtl/fastwave_pkg.sv`):

| item | value |
|---|---|
| convolution blocks x layers per block | 2 x 14 |
| filter width | 2 |
| dilation = queue length of layer i of a block (i = 1..14) | 2^(i-1): 1, 2, 4, ..., 8192 |
| channels | 128 (the very first layer has 1 input channel) |
| activation | tanh after every convolution layer |
| output layer | fully connected, 100 -> 256, with bias, no activation |
| sampling | arg-max over the 256 outputs (no softmax) |
| sample encoding | 256 levels spread linearly over [-1, 1] |
| number format | signed fixed point, 27 bits, 19 of them fractional (range [-256, 256)) |
| parallelism (out x in) | 1 x 1 for the first layer, 8 x 4 for all others and for the FC layer |

Queue storage is the dominant memory: sum(QueueLength x InputChannels) =
4,193,921 values, or 113.2 Mbit at 27 bits. The largest queues are the
14th layer of each block, 8192 x 128 each. Kernels and FC weights add
910,848 values, or 24.6 Mbit.

## One generation step

`fastwave_top` chains the layer instances. A step starts with the current
input value `x` (the seed for the first step, then the previous sample's
value).

For every layer n, in order, with input `O[n-1]` (`x` for the first layer):

1. **Pop and push.** The oldest vector `Q[n][0]` is read from the layer's
   queue. `O[n-1]` is written into the same slot, and the pointer advances.
2. **First product.** `O1 = K[n][0] * Q[n][0]`.
3. **Second product and vector addition.** `O = K[n][1] * O[n-1] + O1`.
   The addition uses the engine's bias input.
4. **Activation.** `O[n] = tanh(O)`. This uses `TANH_UNITS` (8) CORDIC units
   in groups.

The last layer's output then goes to the FC layer. The FC layer reads the
first 100 of that layer's 128 channels, computes `W * O + b` and passes the
256 results, as they stream out of the engine, into the arg-max unit. The
index of the maximum is the sample. `sample_valid` pulses with that index
and its value `(2i - 255) / 255`. The value becomes the next step's input.

The layers run strictly one after another, because each one needs the
previous layer's output. Each layer starts on the cycle after the previous
one raises `done`.

## Convolutional queues (`cyclic_queue`)

Each queue is a circular array of `QLEN` vectors of `IC` elements, with one
pointer. The pointer always marks the oldest vector. Pop reads that slot and
push overwrites it, then the pointer moves on modulo `QLEN`. Nothing is ever
shifted. A pop that comes in the same cycle as a push reads the old contents
(read-first), so the layer does both in one cycle.

Fast-WaveNet starts with queues full of zeros. Clearing 8192 x 128 entries
would take thousands of cycles, so the queue keeps a `full` flag instead. A
pop returns zeros until `QLEN` vectors have been pushed since the last
`clear`. `fastwave_top` clears every queue when a generation starts.

The array is plain RTL. Which queues go to block RAM and which to UltraRAM
is left to the synthesis tool. (The FastWave authors placed the two
8192-deep queues in URAM and all others in BRAM.)

## Matrix multiplication engine (`mat_mul_engine`)

This is the part with the most structure. It computes `Y = W X + b` for an
`M x N` matrix, and it is used by every convolution layer (twice per step)
and by the FC layer.

**Two levels of parallelism.** `P_OUT` rows are processed together as one
*chunk*. Each row's dot product (`dot_product`) splits the `N` inputs into
`P_IN` slices of `CH = N / P_IN` elements. One MAC (`mac_unit`) per slice
walks its slice, one element per cycle. After `CH` cycles, `reduce_sum`
adds the `P_IN` partial sums. So a chunk of `P_OUT` rows takes `CH` cycles
on `P_OUT x P_IN` MACs.

**Two weight buffers.** The weights live in a `weight_memory` whose words
each hold `P_OUT x P_IN` weights. The word at address `base + rb*CH + j`
holds, in lane `r*P_IN + c`, the weight `W[rb*P_OUT + r][c*CH + j]`. Column
`j` of chunk `rb` is therefore one word. While the MACs consume chunk
`rb - 1` from one buffer, one word per cycle of chunk `rb` is copied into
the other buffer (the "memory copy"). Both take `CH` cycles, so they
overlap exactly:

```
phase:      0           1           2      ...   M/P_OUT
copy:    chunk 0     chunk 1     chunk 2   ...   -
compute:    -        chunk 0     chunk 1   ...   chunk M/P_OUT-1
buffer:  fill A      fill B/use A fill A/use B
```

A product takes `(M/P_OUT + 1) * CH + 2` cycles from `start` to `done`:
546 cycles for a 128 x 128 layer and 827 for the FC layer. Results leave as
one beat of `P_OUT` values per chunk. Each beat is
`sat(floor(acc / 2^19) + b[row])`.

**Bypass.** The memory read has one cycle of latency. When `CH = 1` (the
first layer, with a single input channel), a column is needed in the very
cycle it is written into the buffer. The engine then forwards the memory
read data straight to the MACs.

**Reduction tree (`reduce_sum`).** Pairs of the input array are added into
a second array ("mode 0"), and pairs of that into the next ("mode 1"). The
two modes alternate until one value is left. Here the levels are rows of
combinational adders. Sizes that are not powers of two are padded with
zeros.

## Arithmetic

All operands use one format: 27-bit two's complement with 19 fraction bits.
Products are exact (54 bits) and are summed in 64-bit accumulators, so the
order of summation has no effect on the result. A sum goes back to the data
format by an arithmetic right shift of 19 bits (rounding toward minus
infinity), the addition of the bias, and saturation to the 27-bit range.
For the convolutions this gives `O = sat(floor(K1*x / 2^19) + sat(floor(K0*q / 2^19)))`.

## tanh (`tanh_cordic`)

This is a sequential hyperbolic CORDIC, 48 cycles per value:

1. If `|x| >= 8`, the result is ±1 (2 cycles).
2. Otherwise `t = 2|x|` is reduced as `t = k ln2 + r`. Here `k` comes from a
   constant multiply by `1/ln2`, and `r` lies in [0, ln2).
3. 26 rotation-mode iterations (shifts 1..24, with 4 and 13 repeated) start
   from `x0 = y0 = 1/A` and `z0 = -r`. They produce `e^-r`. Then
   `E = e^-2|x| = e^-r >> k`.
4. `tanh|x| = (1 - E) / (1 + E)` comes from a 19-step restoring division,
   and the sign is restored.

Internal values carry 24 fraction bits. The results tested lie within 1 LSB
of the exact tanh.

## Timing

Cycles per generated sample, when no tanh group saturates completely:

| part | cycles |
|---|---|
| first layer: 3 + 2 x (129 + 2) + 16 groups x 49 | 1,049 |
| each of the other 27 layers: 3 + 2 x (17 x 32 + 2) + 16 x 49 | 1,879 |
| FC layer and arg-max: (33 x 25 + 2) + 1 | 828 |
| step issue | 1 |
| **total** | **52,611** |

A tanh group whose inputs all saturate takes 3 cycles instead of 49. At
150 MHz, 52,611 cycles per sample is about 2,850 samples per second. The
authors' HLS implementation reports 78,275 cycles per sample (1,475 samples
per second). The two numbers come from different micro-architectures. The
arithmetic work is the same: 32 MACs per layer. The cycle counts come from
simulation. The 150 MHz clock is the source design's figure. This RTL has
not been synthesized or timed for any FPGA, so it is not known to meet that
clock.

## Host interface

`fastwave_top` ports:

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `wr` (`wr_req_t`) | in | one weight write per cycle: `valid`, `layer`, `tap`, `row`, `col`, `data` |
| `start`, `seed`, `num_samples` | in | start a generation of `num_samples` samples from the input value `seed` (ignored while busy) |
| `busy` | out | generation running |
| `sample_valid`, `sample_idx`, `sample_value` | out | one pulse per sample: level 0..255 and its value |

Weight addressing: `layer` 0..27 is a convolution layer (block-major). For a
convolution layer, `tap` 0 is `K[n][0]` (applied to the popped queue vector)
and `tap` 1 is `K[n][1]` (applied to the previous layer's output). `row` is
the output channel and `col` the input channel. `layer` 28 is the FC layer:
`tap` 0 writes `W[row = output][col = input]` and `tap` 1 writes the bias
`b[row]`. Weights should be written while the accelerator is idle.

## Files

| file | contents |
|---|---|
| `rtl/fastwave_pkg.sv` | number format, network constants, `wr_req_t`, fixed-point helpers |
| `rtl/fastwave_top.sv` | network description: layer chain, FC, feedback loop, generation control |
| `rtl/dilated_conv_layer.sv` | one layer: weights, queue, engine, tanh units, step sequencer |
| `rtl/cyclic_queue.sv` | circular convolutional queue |
| `rtl/mat_mul_engine.sv` | chunked, double-buffered matrix-vector engine |
| `rtl/dot_product.sv`, `rtl/mac_unit.sv`, `rtl/reduce_sum.sv` | one row: MAC lanes and reduction tree |
| `rtl/weight_memory.sv` | lane-addressed weight RAM |
| `rtl/tanh_cordic.sv` | CORDIC tanh |
| `rtl/fc_layer.sv`, `rtl/argmax_unit.sv` | output layer and arg-max sampling |
| `tb/fw_ref_pkg.sv` | bit-exact software reference of the whole network, including its cycle count |
| `tb/tb_*.sv` | one self-checking testbench per module; `mme_harness.sv` is a helper |

## Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. For
example:

```
verilator --binary --timing --assert -Wno-fatal -Mdir obj_top \
  rtl/fastwave_pkg.sv tb/fw_ref_pkg.sv rtl/*.sv tb/tb_fastwave_top.sv \
  --top-module tb_fastwave_top
obj_top/Vtb_fastwave_top
```

The testbench `tb_mat_mul_engine` also needs `tb/mme_harness.sv`.

- `tb_fastwave_top` runs the whole design at reduced size: 2 x 3 layers, 8
  channels, FC 6 -> 16, parallelism 4 x 2. It runs two generations (14 and
  6 samples) and compares every sample, and the exact cycles per sample,
  with the reference model. It also requires that each of these happened:
  a queue wrap-around, weight-buffer swaps, the `CH = 1` bypass, tanh
  saturation, sample feedback and a restart with cleared queues.
- `tb_fastwave_full` runs the same comparison at the default size, for
  three samples, after writing all 910,848 weights. It takes about 25 s of
  simulation after about 80 s of compilation.
- The per-module testbenches check each module against values computed
  independently in the testbench, including latencies.

The reference model (`fw_ref_pkg`) is written from the algorithm, not from
the RTL. Because of that, a change to the arithmetic (rounding, tanh,
saturation) must be made in both places.

## Where this RTL departs from, or goes beyond, the source design

- **FC input width.** The source gives 128 output channels for the last
  convolution layer but a 100-input FC layer, and does not say how they
  connect. Here the FC layer reads channels 0..99.
- **Queue length.** One passage gives the queue length as 2^dilation; the
  layer table gives lengths equal to the dilation (1..8192). The table is
  followed. A passage that gives the longest queue as 8192 x 24 conflicts
  with the table's 128 channels; the table is followed there too.
- **tanh.** The source uses a vendor library CORDIC. The CORDIC here is
  this design's own, so bit-level results differ from that library.
- **Own choices.** The following are this design's choices, not given by
  the source:
  - the accumulator width, rounding and saturation;
  - the weight memory layout and the copy bandwidth of one word per cycle;
  - the bypass;
  - the tanh unit count;
  - the zero-start mechanism of the queues;
  - the sample-to-value mapping;
  - the seed, start and sample interface;
  - the host write port.
- **Not included.**
  - Mapping to specific BRAM/URAM primitives.
  - The system peripherals around the accelerator.
  - Training, and the transfer of trained weights.
  - The softmax, which the source also skips in favour of arg-max.
