# A reconfigurable convolution co-processor with Q(16,15) fixed-point arithmetic

This is SystemVerilog RTL for a co-processor that runs the convolution layers of a
convolutional neural network (CNN) for a host CPU. The host places filters and input
feature maps in its main memory and writes a short program. The co-processor then
streams each input map through once. Every filter of the layer is applied to it in
parallel.

The design follows the architecture of Wijeratne, Jayaweera, Dananjaya and Pasqual,
"Reconfigurable co-processor architecture with limited numerical precision to
accelerate deep convolutional neural networks". It rests on three ideas:

* **One window, many filters.** The arithmetic fabric is called the *Matrix Web*.
  It holds `N_CB` identical *Cell Bodies*, and each Cell Body computes one output
  feature map. A single data cache cuts one `k x k x D_IN` window out of the input
  per clock cycle. That window goes to every Cell Body at once, so the input is
  read from memory once per layer, however many filters run.
* **32-bit fixed point instead of floating point.** All data are Q(16,15): one sign
  bit, 16 integer bits and 15 fraction bits. A multiply is an integer multiply and a
  shift.
* **A small CISC-like instruction set.** Each layer is described by a group of
  instructions. The instructions set the map size, depth, stride and zero padding,
  pick which Cell Bodies take part, and give memory addresses for the weights,
  biases, input and outputs. The same hardware can therefore run layer after layer.

The default parameters are the configuration the paper compares in its resource
and throughput tables: 16 Cell Bodies, 3x3 kernels and input depth 1.

## Contents

1. [Number format](#number-format)
2. [Data flow through the chip](#data-flow-through-the-chip)
3. [The Cell Body](#the-cell-body)
4. [The data cache: windows, stride and padding](#the-data-cache-windows-stride-and-padding)
5. [Flow control](#flow-control)
6. [Instruction set and the Process Controller](#instruction-set-and-the-process-controller)
7. [Memory layout expected by the hardware](#memory-layout-expected-by-the-hardware)
8. [Timing and throughput](#timing-and-throughput)
9. [Parameters](#parameters)
10. [What follows the paper and what is this design's own](#what-follows-the-paper-and-what-is-this-designs-own)
11. [Fitting the evaluated networks](#fitting-the-evaluated-networks)
12. [Simulating and verifying](#simulating-and-verifying)
13. [Files](#files)

## Number format

A value `v` is stored as the 32-bit two's-complement integer `round_down(v * 2^15)`.
The range is about ±65536 and the resolution is 2^-15 (about 3e-5).

* **Multiply** (`mult_unit`): the full 64-bit product is shifted right by 15 bits
  (an arithmetic shift, so it rounds towards minus infinity). The low 32 bits are
  kept.
* **Add**: a plain 32-bit add that wraps on overflow.

There is no saturation anywhere. As in the paper, you avoid overflow by choosing
the number format to suit the values of a layer. The only exception is the
activation unit, which clamps its internal `2x` for tanh.

## Data flow through the chip

```
 host memory                                                     host memory
     |                                                               ^
 [input_dma] --tagged words--> [pre-fetch buffer] --> [interconnect]  |
     ^                                                |  |  |     [output_dma]
     | jobs                  weights / bias strobes --+  |  |         ^
 [process_controller] <-- [instr_cache] <-- host         |  |  [output data buffer]
     | config, start                                     |  |         ^
     v                                        raw data   v  |         |
 +------------------------------ Matrix Web ----------------+---------+------+
 | [data cache] -- one k x k x D_IN window / cycle --> crossbar (broadcast)   |
 |                           |             |                  |               |
 |                      [Cell Body 0] [Cell Body 1] ... [Cell Body N_CB-1]     |
 |                           \_____________|__________________/               |
 |                                         | one value per Cell Body          |
 +-----------------------------------------+--> interconnect (gather) --------+
```

The path has separate instruction and data sides, like a Harvard machine.

1. The host writes a program into the **instruction cache** (`instr_cache`) and
   pulses `start`.
2. The **Process Controller** (`process_controller`) fetches one layer's group of
   instructions at one per cycle. It records the addresses and the layer
   configuration.
3. For each enabled Cell Body, the controller gives the **input DMA** (`input_dma`)
   one job per depth channel for the weights, and one job for the bias. The DMA
   reads main memory and pushes the words into the **pre-fetch buffer**. Each word
   carries a tag: its destination (weight cache, bias cache or data cache), its
   Cell Body, its channel and its index within the job.
4. The **interconnect** (`lane_interconnect`) pops the buffer. It turns weight and
   bias words into write strobes for the addressed caches, and hands raw input
   words to the data cache through a valid/ready handshake.
5. When the caches are full, the controller starts the Matrix Web. It then sends
   one DMA job that streams the whole input map.
6. The **data cache** (`data_cache`) issues windows. The crossbar gives each window
   to every enabled Cell Body in the same cycle.
7. The Cell Bodies' results come out in the same cycle. The interconnect gathers
   them into one **output data buffer** entry: one word per Cell Body plus the
   enable mask.
8. The **output DMA** (`output_dma`) writes the masked words to memory, each at the
   next address of that Cell Body's own output area.
9. When the DMAs, both buffers and the Matrix Web are idle, the controller fetches
   the next group. A STOP instruction raises `done`.

## The Cell Body

A Cell Body (`cell_body`) applies one filter:

```
out(y,x) = POOL( F( sum over d < D, i < k, j < k of  w(d,i,j) * in(y*s - p + i, x*s - p + j, d)  + b ) )
```

Here `F` is the activation, `s` the stride and `p` the zero padding. Its pipeline:

| stage | block | what it does | cycles |
|---|---|---|---|
| 1 | `D_IN` x `mac_unit`, multiplication plane | `k*k` `mult_unit`s per MAC unit multiply the window by the weights held in the MAC unit's own `weight_cache` | 1 |
| 2 | addition plane (`adder_tree`) | binary tree of adders, one register per level; leaves padded with zeros to a power of two (16 leaves for `k = 3`) | `clog2(k*k)` = 4 |
| 3 | `bias_adder` | adder tree over the `D_IN` MAC results, then adds the value in the bias cache | `clog2(D_IN) + 1` = 1 |
| 4 | `activation_fn` | selected by `sel_af` | 1 |
| 5 | `pooling_unit` | max pooling of width `conf_p`, using the pooling cache | 1 |

For the defaults, a pooled value leaves 8 cycles after its window enters the Cell
Body, or 9 cycles after it is issued by the data cache. The pipeline has no
enable. A new window can enter every cycle, and nothing inside a Cell Body ever
stalls.

The marks `sof` (first window of a map) and `eol` (last window of an output row)
travel through the pipeline alongside each window. The pooling unit needs them to
know where rows and maps start.

**Activation.** `sel_af` is `cnn_pkg::af_sel_e`:

| value | function |
|---|---|
| 0 | none |
| 1 | ReLU |
| 2 | sigmoid |
| 3 | tanh |

The sigmoid is a piecewise-linear fit (the "PLAN" approximation), built from
shifts and adds only:

| input range | output |
|---|---|
| `|x| >= 5` | 1 |
| `2.375 <= |x| < 5` | `|x|/32 + 0.84375` |
| `1 <= |x| < 2.375` | `|x|/8 + 0.625` |
| `|x| < 1` | `|x|/4 + 0.5` |

For negative `x` the output is `1 - y`. The tanh is `2*sigmoid(2x) - 1`. The largest
error against the exact functions is about 0.02 for the sigmoid and 0.04 for the
tanh.

**Pooling.** Windows are `conf_p x conf_p` with stride `conf_p`, so they do not
overlap. Setting `conf_p = 1` (or 0) switches pooling off. The pooling cache holds
one running maximum per pooled column, so a row-ordered stream can be pooled
without buffering whole rows. A pooled value is emitted one cycle after the last
input of its window. Windows cut off by the right or bottom edge are dropped.

**Caches and flush.** The weight and bias caches are registers. Flushing a Cell
Body (the FLUSH instruction) or resetting the chip clears them.

## The data cache: windows, stride and padding

This is the least obvious block. The input map arrives in raster order. The `depth`
channel words of each pixel come one after another. Maps are square:
`width x width`.

For each channel, `data_cache` keeps a ring of `NROWS` rows of `MAX_W` words.
`NROWS` is the power of two at or above `k + 1`, which is 4 for `k = 3`. Input row
`r` is stored in ring slot `r mod NROWS`.

The read side walks the output map. `(rs, cs)` is the input row and column of the
window's top-left corner. It starts at `(-p, -p)`, where `p = (k-1)/2` when zero
padding is enabled and 0 otherwise. It then steps by the stride `s` along the row
and, at the end of the row, back to `-p` and down `s` rows.

The walk needs no divider to count output columns. A row ends when the next window
would reach past `width - 1 + p`, and the map ends the same way in the row
direction.

A window is issued when two conditions hold:

* every input row it covers, up to `min(rs + k - 1, width - 1)`, has been
  completely written;
* the output side has room (see [Flow control](#flow-control)).

All `k x k x D_IN` words of a window are read and registered in one cycle. The
following positions read as zero:

* positions outside the map, which gives the zero padding without storing or
  transferring any padding;
* channels at or above the programmed depth.

An input word is accepted (`in_ready`) only while its row is below
`max(rs, 0) + NROWS`. The rows the current windows need are therefore never
overwritten. This is why a stalled output side stalls the input stream in turn.

Once the last window has been issued (`scan_done`), any remaining input rows are
accepted and discarded.

With these rules, the number of output positions per side is
`(width + 2p - k) / s + 1`, rounded down.

## Flow control

The only points where anything waits:

| where | rule |
|---|---|
| input DMA -> pre-fetch buffer | A read request is issued only while the outstanding reads are fewer than the buffer's free entries. Read responses therefore never need back-pressure. |
| pre-fetch buffer -> data cache | valid/ready. The data cache refuses a word while its ring is full. |
| data cache -> Cell Bodies | A window is issued only when the output data buffer has more than `PIPE_DEPTH = OUT_LAT + 2` free entries (10 for the defaults). Every window in flight thus has a guaranteed slot, so the arithmetic pipeline needs no stall signal. |
| output DMA -> memory | valid/ready on the write port. |

Assertions in `cnn_coprocessor` check that neither buffer ever overflows.
`lane_interconnect` checks that the enabled Cell Bodies always produce results in
the same cycles.

## Instruction set and the Process Controller

All instructions are 64 bits. The field order is the paper's. The bit positions
are this design's choice, since the paper prints none.

| type | bits |
|---|---|
| MatrixWeb Control | `[63:62]` TYPE=0, `[61:60]` CONFIG, `[59:52]` CELL BODY ID, `[51:40]` feature width, `[39:28]` feature depth, `[27:24]` stride, `[23]` zero-pad enable |
| Filter Memory Control | `[63:62]` TYPE=1, `[61:60]` CONFIG (unused), `[59:52]` cell body, `[51:50]` kind (0 weights, 1 bias, 2 output), `[49:38]` depth channel, `[31:0]` start address |
| Input Memory Control | `[63:62]` TYPE=2, `[61:60]` CONFIG (unused), `[31:0]` start address |

CONFIG of a MatrixWeb Control instruction takes one of three values:

| CONFIG | meaning |
|---|---|
| 0, CONV | This Cell Body takes part in the layer. The instruction also sets the layer's width, depth, stride and padding (the last such instruction of the group wins). |
| 1, FLUSH | Clear this Cell Body's weight and bias caches. |
| 2, STOP | End of the program. `done` rises. |

**A layer's group.** Let `gamma` be the number of Cell Bodies used and `D` the
depth. A group consists of:

* `gamma` CONV instructions;
* `D + 2` Filter Memory instructions per Cell Body: `D` for the weights of each
  channel, one for the bias and one for the output area;
* one Input Memory instruction, which closes the group and starts the layer.

That is `C = gamma + (D + 2) * gamma + 1` instructions. This is the paper's formula
for the number of cycles needed to fetch them. The controller reads one instruction
per cycle from a synchronous memory, so a group takes `C + 1` cycles. A program is
any number of groups followed by STOP. Helper functions `enc_mw`, `enc_filter` and
`enc_input` in `cnn_pkg` build instruction words.

Example for 16 Cell Bodies at depth 1 (65 instructions, from `tb/tb_cnn_full.sv`):

```systemverilog
for (int n = 0; n < 16; n++) prog.push_back(enc_mw(CFG_CONV, n, 32, 1, 1, 1));
for (int n = 0; n < 16; n++) begin
  prog.push_back(enc_filter(FK_WEIGHTS, n, 0, 100 + 9*n));
  prog.push_back(enc_filter(FK_BIAS,    n, 0, 400 + n));
  prog.push_back(enc_filter(FK_OUTPUT,  n, 0, 4096 + 2048*n));
end
prog.push_back(enc_input(1000));
prog.push_back(enc_mw(CFG_STOP, 0, 0, 0, 0, 0));
```

**Execution of a group.** The controller moves through these states:

1. FETCH
2. LOAD: one DMA job per (Cell Body, channel) for the weights, then one per Cell
   Body for the bias, in Cell Body order.
3. WAIT_LOAD: until the DMA is idle, the buffers are empty and the last strobe
   has been written.
4. STREAM: start the Matrix Web, load the output addresses into the output DMA, and
   send one job of `width*width*depth` words.
5. WAIT_DONE: until everything is idle.
6. Back to FETCH.

Cell Bodies not named in the group get no windows and write nothing. This is how
one layer can use fewer than `N_CB` filters.

`sel_af` and `conf_p` are top-level inputs, not instruction fields (see below).

## Memory layout expected by the hardware

Main memory is addressed in 32-bit words.

| data | layout |
|---|---|
| weights of one (filter, channel) | `k*k` consecutive words, row-major: element `i*k + j` is row `i`, column `j` |
| bias | one word |
| input map | `width*width*depth` words, pixel-major with the channels interleaved (HWC): word `(r*width + c)*depth + d` |
| output map of a Cell Body | consecutive words from its output address, row-major, after pooling |

A depth-1 output map can be fed straight back as the next layer's input, as
`tb_cnn_coprocessor` does. A layer with several Cell Bodies writes its maps as
separate planes. The host must interleave them before they can serve as a deeper
layer's input.

## Timing and throughput

| quantity | default (k=3, D_IN=1) | general |
|---|---|---|
| window issue rate | 1 per cycle | 1 per cycle |
| data cache to pooled output latency | 9 cycles | `1 + (1 + clog2(k²)) + (clog2(D_IN) + 1) + 1 + 1` |
| instruction fetch per group | `C + 1` cycles | `C = γ + (D+2)γ + 1` |
| multiplies per cycle | 144 (16 x 9) | `N_CB * D_IN * k²` |

The single memory write port writes one word per cycle. With all 16 Cell Bodies
enabled and no pooling, each window produces 16 words, so the output side limits
the layer to one window every 16 cycles. In `tb_cnn_full`, a 32x32 layer with 16
filters, padding and ReLU completes in 16,825 cycles. That is the 16,384 output
writes plus about 440 cycles of instruction fetch, cache loading and pipeline fill.

With 2x2 pooling, or with fewer Cell Bodies enabled, the output side is less
loaded and the window rate goes up.

With a stride above 1, the input side can also limit the rate. The data cache's
ring holds only `k + 1` rows. The newest row needed by the next row of windows can
therefore only be written once the current row of windows has been issued. At
stride 2, part of every row's input load cannot overlap the output writes. On a
256x256x3 stride-2 layer with 16 Cell Bodies this costs about 21% over the
write-port bound.

At 200 MHz the peak arithmetic rate is 144 MACs per cycle, which is 57.6 GOP/s
counting a multiply and an add as two operations. The paper reports 226.2 GOP/s
for the same configuration and does not say how that figure is counted; this RTL
does not reproduce it.

## Parameters

| parameter | default | meaning | origin |
|---|---|---|---|
| `N_CB` | 16 | Cell Bodies (parallel filters) | paper's compared configuration |
| `K` | 3 | kernel width `k` | paper's compared configuration; 3 to 9 evaluated |
| `D_IN` | 1 | MAC units per Cell Body (largest input depth) | paper's compared configuration; 3 also evaluated |
| `DATA_W`, `FRAC_W` | 32, 15 | Q(16,15) | paper |
| `P_MAX` | 3 | largest pooling width | this design |
| `MAX_W` | 256 | largest map width (data cache row, pooling cache) | this design |
| `IC_DEPTH` | 2048 | instruction cache words | this design |
| `PF_DEPTH` | 16 | pre-fetch buffer entries | this design |
| `OB_DEPTH` | 32 | output buffer entries; must exceed `PIPE_DEPTH` | this design |

`K` and `D_IN` are build-time parameters. The paper calls kernel size and depth
"reconfigurable parameters" of an FPGA fabric, meaning the fabric is rebuilt for
them. At run time a layer may use any depth up to `D_IN`, any stride from 1 to 15,
and any square width up to `MAX_W` (and at least `k`).

## What follows the paper and what is this design's own

**Taken from the paper:**

* The block structure: Process Controller, instruction cache, input and output
  DMAs, pre-fetch buffer, interconnect, data cache, crossbar, Matrix Web, and Cell
  Bodies made of MAC units with weight caches, a bias adder, an activation, a
  pooling cache and max pooling.
* The Q(16,15) format.
* `k²` multipliers per MAC unit and `D_IN` MAC units per Cell Body.
* The zero-padded pipelined adder trees.
* All Cell Bodies working on the same window in the same cycle.
* The three instruction formats and their field order.
* The instruction count `C`.
* Per-Cell-Body weight, bias and output addresses.
* Zero padding done inside the chip.
* Pooling width 1 meaning no pooling.

**This design's choices, where the paper is silent:**

* All bit widths and encodings, including the instruction bit layout and the
  CONFIG and activation codes.
* Truncating multiply with no saturation.
* The sigmoid and tanh circuits.
* Pooling stride equal to the pooling width.
* Square maps, HWC input order, and zero padding fixed at `(k-1)/2`. The paper
  speaks of a zero-padding "enable".
* The row-ring data cache and the credit-based flow control.
* The tagged input lane.
* The memory bus shape, buffer depths and latencies.
* `sel_af` and `conf_p` as top-level inputs, because the paper says these are set
  "at the configuration level" and its instruction formats have no field for them.

**Departures and gaps:**

* The paper lists four activations, "Sigmoid, tanh, ReLU and Max", but never
  defines "Max". It is not built. Max *pooling* is built.
* The paper sizes the first adder layer as `2^(k-1) x D_in` units. That does not
  match a binary tree over `k²` products (4 against 5 for `k = 3`). The tree here
  has `clog2(k²)` levels over a zero-padded power-of-two number of leaves, as the
  paper's figure draws it.
* The text says each Cell Body has three Filter Memory Control instructions, but
  its instruction-count formula has `D + 2` per Cell Body. This design follows the
  formula: one weight instruction per depth channel, plus a bias and an output
  instruction. The two agree at depth 1.
* The paper's adder-count formula gives 31 adders per 3x3 MAC unit. The tree built
  here has 15 adders over 16 leaves; the formula seems to count the leaves too.
* The paper speaks of several DMA channels without giving a number. One read
  engine and one write engine are built.
* The 226.2 GOP/s figure is not reached (see above).
* Layers deeper than `D_IN` are not supported. There is no way to accumulate
  partial sums across several passes, and the paper describes none.
* The PCIe link and the host memory are outside the design. The top exposes plain
  memory read and write ports where the DMA link would attach.

## Fitting the evaluated networks

The paper runs AlexNet and ZynqNet on its fabric "by setting up reconfigurable
parameters accordingly". At the default build (k = 3, D_IN = 1) neither network
runs whole:

* AlexNet needs kernels of 11x11 and 5x5, and input depths of 3 to 384.
* ZynqNet uses 3x3 and 1x1 kernels but depths of 3 up to several hundred.

A 1x1 kernel can be run as a 3x3 kernel whose weights are zero except the centre,
with padding enabled.

`tb_cnn_layers` runs the first layer of each network at its real size, on a
build with the kernel size and depth that layer needs:

| layer | build | input | kernel, stride | output | cycles | streaming bound |
|---|---|---|---|---|---|---|
| ZynqNet layer 1 | `K = 3, D_IN = 3` | 256x256x3 | 3x3, stride 2, padded | 16 x 128x128 | 317,078 | 262,144 output words |
| AlexNet layer 1 | `K = 11, D_IN = 3` | 227x227x3 | 11x11, stride 4 | 16 x 55x55 | 161,676 | 154,587 input words |

Both layers have more than 16 filters (64 and 96), so a full layer takes four or
six passes of 16. Each case runs one pass and checks every output. The ZynqNet
layer runs 21% above its write-port bound (see
[Timing and throughput](#timing-and-throughput)). The AlexNet layer is limited by
its input stream and comes within 5% of it.

Depth remains the limit for the deeper layers. A whole network runs only on a
build with `D_IN` at least its largest layer depth and `K` at least its largest
kernel. The map widths of both networks (227 and 256) fit `MAX_W = 256`.

The single-Cell-Body builds of the paper's resource tables (k = 3 to 9, D_IN = 1
or 3) are instances of `cell_body` with `K` and `D_IN` set. `tb_mac_unit` and
`tb_cell_body` run 5x5 and depth-2 instances.

**Accuracy of the number format.** `tb_mac_error` builds MAC units for k = 3 to 9.
It feeds them random weights in [-1, 1) and random inputs in [0, R), for R = 1, 10,
50 and 100, and compares each result with the exact real-valued dot product. The
average absolute errors measured:

| k | R = 1 | R = 10 | R = 50 | R = 100 |
|---|---|---|---|---|
| 3 | 0.0002 | 0.0009 | 0.0039 | 0.0075 |
| 5 | 0.0005 | 0.0025 | 0.0112 | 0.0218 |
| 7 | 0.0011 | 0.0049 | 0.0218 | 0.0429 |
| 9 | 0.0019 | 0.0078 | 0.0340 | 0.0670 |

The error grows with both the kernel width and the input range, as the paper
reports, and stays well below 0.1 for inputs up to 50. The paper's own plotted
errors are much larger (0.03 for 3x3 with inputs below 1, and up to 12 for 9x9 with
inputs to 100). It does not describe how it measured them, so those curves are not
reproduced. The testbench checks every sample against the worst-case bound
`k²(R + 2) 2^-15`, checks that the averages stay below 0.1 up to R = 50, and checks
that the error grows.

## Simulating and verifying

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. The references are computed
independently in `tb/tb_ref_pkg.sv`, which provides a 64-bit Q multiply, a
real-valued evaluation of the activation curves, and a full reference layer.
`tb/tb_main_memory.sv` is a behavioural model of host memory, with random read
latency and random write back-pressure.

To run one testbench with Verilator 5:

```sh
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/cnn_pkg.sv tb/tb_ref_pkg.sv tb/tb_cnn_coprocessor.sv \
  --top-module tb_cnn_coprocessor -o sim
./obj_dir/sim
```

Replace the testbench file and the top module name to run any other.

| testbench | covers |
|---|---|
| `tb_mult_unit`, `tb_adder_tree`, `tb_weight_cache`, `tb_mac_unit`, `tb_bias_adder`, `tb_activation_fn`, `tb_pooling_unit` | arithmetic units, exact results and latencies; 5x5 MAC |
| `tb_cell_body` | depth-2 Cell Body, all activations, pooling 1/2/3, output latency, flush |
| `tb_data_cache` | windows against the map for widths 7–16, strides 1, 2, 3 and 5, with and without padding; both stalls; one window per cycle |
| `tb_matrix_web` | 4 Cell Bodies (3 enabled), full layers against the reference, stalls, lock-step, disabled Cell Body silent |
| `tb_lane_interconnect`, `tb_sync_fifo`, `tb_instr_cache`, `tb_input_dma`, `tb_output_dma` | routing, buffering, DMA order, credits, back-pressure |
| `tb_process_controller` | fetch of exactly `C` instructions per group, back to back; DMA job order; configuration; FLUSH; STOP |
| `tb_cnn_coprocessor` | whole chip at reduced size (4 Cell Bodies, depth 2): four programs, a two-layer chain, all activations, pooling on and off, padding, strides 2 and 3, flush. It counts stalls of the Matrix Web, input back-pressure, memory write back-pressure and a full pre-fetch buffer, and fails if any of them never happens. |
| `tb_cnn_layers` (with helper `tb_layer_case`) | whole chip built for ZynqNet's and AlexNet's first layers at full size (see above): every output, instruction count and cycle count checked |
| `tb_mac_error` | accuracy of the Q(16,15) MAC for k = 3 to 9 against real arithmetic (see above) |
| `tb_cnn_full` | whole chip at default parameters: one 16-filter 32x32 layer, every output checked, the cycle count bounded |

All testbenches pass. Each block has also been checked against a deliberately broken
copy of itself, and its testbench reports failures.

## Files

`rtl/`, one module or package per file:

| file | content |
|---|---|
| `cnn_pkg.sv` | types, instruction fields and encoders |
| `mult_unit.sv` | one multiplication unit |
| `adder_tree.sv` | the addition plane |
| `weight_cache.sv` | a MAC unit's weight cache |
| `mac_unit.sv` | one MAC unit |
| `bias_adder.sv` | the bias adder |
| `activation_fn.sv` | the activation |
| `pooling_unit.sv` | pooling cache and max pooling |
| `cell_body.sv` | one Cell Body |
| `data_cache.sv` | the data cache |
| `matrix_web.sv` | data cache, crossbar and Cell Bodies |
| `lane_interconnect.sv` | the interconnect |
| `sync_fifo.sv` | the pre-fetch and output data buffers |
| `instr_cache.sv` | the instruction cache |
| `input_dma.sv` | the input DMA |
| `output_dma.sv` | the output DMA |
| `process_controller.sv` | the Process Controller |
| `cnn_coprocessor.sv` | the top level |

`tb/`: one testbench per block, `tb_cnn_full.sv` at full size, `tb_cnn_layers.sv` and
`tb_layer_case.sv` for the network layers, `tb_mac_error.sv` for accuracy, `tb_ref_pkg.sv` with
the reference models, and `tb_main_memory.sv` with the memory model.
