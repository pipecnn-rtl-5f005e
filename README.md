# A deeply pipelined CNN accelerator in SystemVerilog

Convolutional networks such as AlexNet and VGG-16 spend almost all their time
in three-dimensional multiply-accumulate loops. A GPU-style accelerator runs
each layer as a separate kernel and returns every intermediate result to
off-chip memory. This design instead chains four kernels into one streaming
pipeline:

```
            +-------+  steps   +-------------+ CU_NUM  +-------------+ CU_NUM  +-------+
 global --> | MemRD | =======> | Convolution | --ch--> |   Pooling   | --ch--> | MemWR | --> global
 memory     +-------+          | CU_NUM x    |         | line buffers|         +-------+    memory
   ^  |        ^ weight cache  | VEC_SIZE    |         +-------------+
   |  v                        +-------------+
 +-----+
 | LRN |   (separate kernel, memory to memory)
 +-----+
```

A convolution layer and the pooling that follows it run in a single launch,
so the un-pooled feature maps never reach memory. The convolution kernel uses
the same circuit for fully connected layers. Local response normalisation
(LRN) runs as a kernel of its own: it reads across neighbouring feature maps,
which needs a different memory access pattern.

The arithmetic is IEEE-754 single precision throughout. The default build has
`VEC_SIZE = 8` lanes per vector and `CU_NUM = 16` convolution pipelines, which
is 128 float multiply-adds per cycle. The source design reports this
configuration as the best one for a Stratix-V A7 board.

This RTL is a re-implementation from a published description of an OpenCL
design. The structure, the data reuse scheme, the pooling line buffers and
the exponent-addressed LRN table follow that description. Widths, handshakes,
memory layout, buffer sizes and the float implementation are this design's
own choices; they are listed in the section on departures below.

## One layer, as the host sees it

The host (outside this design) writes a `layer_cfg_t` (see `rtl/pipecnn_pkg.sv`)
and pulses `start`. `done` pulses once the last result has been written.

| field | meaning |
|---|---|
| `in_w`, `in_h`, `in_cv` | input width, height, and channel count divided by `VEC_SIZE` (C') |
| `k`, `s` | kernel size and stride. An FC layer uses `k = 1`. |
| `conv_w`, `conv_h` | convolution output size `(W-K)/S+1`, computed by the host |
| `out_m` | output maps M. Must be a multiple of `CU_NUM`. |
| `pool_on`, `pool_mode`, `pool_s` | pooling on/off, max or average, and the pooling stride |
| `pool_w`, `pool_h` | pooled output size, computed by the host |
| `in_base`, `w_base`, `out_base` | input and weight bases (vector addresses) and output base (word address) |

**Memory layout.** A volume of C channels × H × W is stored as C/VEC_SIZE
*vector planes*. Each plane is an H × W raster of vectors, and each vector is
VEC_SIZE consecutive 32-bit words. The vector at (channel group c, y, x) is at
`base + (c*H + y)*W + x`. MemWR writes its results in the same layout, so one
layer's output can be the next layer's input without any reshuffling. Filter
f is CN = K·K·C' consecutive vectors at `w_base + f*CN`, ordered by channel
group, then ky, then kx. The kernels do no padding: the host stores padded
inputs.

**Fully connected layers and batching.** An FC layer is a 1×1 convolution
(`k = 1`, CN = C'). To reuse each weight across many inputs, a batch of input
vectors is laid out as a small image. For example, 64 inputs become an 8 × 8
grid with `in_w = in_h = 8`. Each weight vector is then fetched once and used
for every image in the batch.

## The convolution pipeline (`conv_cu`, `conv_kernel`)

Each output neuron is a sum of CN *steps*. One step is the dot product of a
VEC_SIZE-wide feature vector and a weight vector. CN = K·K·C' for a
convolution and C' for an FC layer. This turns the five nested loops of a
convolution into two: one over neurons and one over steps.

Each of the CU_NUM pipelines has three stages:

1. VEC_SIZE float multipliers.
2. A balanced adder tree over the products.
3. A **delayed buffer** `Reg[0..N-1]` (N = 6). Each step computes
   `Temp = tree + Reg[N-1]`, shifts the buffer by one place and stores `Temp`
   in `Reg[0]`.

The buffer therefore holds N interleaved partial sums, and each register is
updated only every N steps. This is what lets an accumulator adder with a
latency of up to N cycles accept a new step every cycle. On the step marked
`last`, the N partial sums (including the new `Temp`) go through a second
adder tree into the output register, and the buffer is cleared for the next
neuron.

The summation order is fixed: product tree, then the N-way interleave, then
the final tree. That order determines the exact rounding of every result.

The kernel replicates the feature vector to all CU_NUM pipelines. Each
pipeline gets its own filter's weight vector, so the kernel produces CU_NUM
neurons of different output maps at the same (x, y). All pipelines share one
handshake and run in lock step.

Timing:

- One step is accepted per cycle.
- `out_valid` rises two clock edges after the edge that accepts the last step.
- A full output channel stalls the whole pipeline.

## MemRD: from NDRange to counters, and the weight cache

The read kernel's index space is the output plane times the window: a
K × K × C' work-group for each output position and group of maps. MemRD
turns it into nested counters:

- innermost: kx, ky, channel group;
- then output x and y;
- outermost: the group of CU_NUM maps.

For each group, MemRD first reads the group's CU_NUM filters into an on-chip
weight buffer of `WBUF_DEPTH` vectors per pipeline (4096, which holds VGG-16's
largest FC filter). It then streams the windows of every output position.
Each feature vector is read from memory once per window and goes to all
pipelines together with the matching cached weights.

Every weight is read from memory exactly once per launch, and the testbenches
check this. Feature read requests are issued only while the 32-entry response
buffer has room for the data, so memory latency is hidden without ever
dropping a response.

## Pooling with line buffers (`pool_kernel`)

Each of the CU_NUM lanes pools its own map. Results arrive row by row. With
L = 2 line buffers (3 × 3 windows), each lane does the following for every
pixel:

1. It reads the column {row y−2, row y−1, row y} from the two line buffers and
   the input.
2. A first pooling stage reduces the column (max, or sum for average pooling).
3. Two registers keep the previous two column results.
4. A second pooling stage reduces those three columns to the window result.

A result is emitted as soon as the last pixel of its window arrives, provided
the window lies on the stride grid. Average pooling multiplies the window sum
by 1/9. With `pool_on = 0` the kernel forwards every word unchanged.

The window size L+1 is fixed when the design is built. Stride, mode and
on/off can change at run time.

## MemWR

MemWR takes each CU_NUM-wide result word and writes its lanes one per cycle.
Map `m = group*CU_NUM + lane` goes to word address
`out_base + ((m/VEC)*out_h + y)*out_w*VEC + x*VEC + m%VEC`.

The output plane is the pooled size when pooling is on and the convolution
size otherwise. Writing one word per cycle costs nothing for convolution
layers, where each position takes at least CN ≥ CU_NUM cycles. For FC layers
with small C' it back-pressures the pipeline, and the end-to-end test
exercises that case.

## LRN: a table addressed by the float's own bits (`lrn_kernel`)

For each neuron v at map c:

- `s = Σ v(c')²` over the 5 maps centred on c;
- the result is `v · pwlf(s)`, where `pwlf` is a piece-wise linear
  approximation of the normalisation factor (for AlexNet,
  `(k + α/n·s)^−β`).

The table is segmented geometrically. Each octave of `s` is split into
2^SEG_BITS pieces, so the segment of `s` is simply its exponent plus its top
SEG_BITS mantissa bits: `code = bits(s) >> (23 − SEG_BITS)`. There is no
comparator tree and no division. The address is `code − seg_base + 1`.
Entry 0 covers everything below the first segment (including s = 0), and
codes beyond the table use the last entry. Each entry holds a slope and an
intercept, and the host loads them through the `lut_*` port.

With SEG_BITS = 2 and AlexNet's constants, the testbench's chord table stays
within 0.5 % of the exact function. The worst error observed is 0.2 %.
The testbench also recomputes each output from the table entry that the
segment code of `s` selects, which pins down the addressing.

The kernel works one pixel at a time:

1. It loads the C channels of a pixel into a local memory.
2. For one channel per cycle, it reads the 5 neighbours in parallel, evaluates
   the formula and writes the result to a second local memory.
3. It writes the result back as C' vectors.

## Floating point

`fp_mul` and `fp_add` in `pipecnn_pkg` are combinational functions that round
to nearest even. They flush subnormal inputs and outputs to zero and saturate
overflow to infinity; NaN and infinity inputs get no special treatment.
`fp_max` orders floats by sign and magnitude. In a real FPGA build these would
be pipelined; here they are written for clarity, and each kernel registers
their results.

## Departures from the source design, and what is missing

- **Initiation interval.** The source reports an initiation interval of two
  for its compiled convolution loop; this RTL accepts a step every cycle. The
  depth N of the delayed buffer is not given and is set to 6.
- **Weight cache.** The source relies on a compiler-generated cache. Here it
  is an explicit buffer, loaded per group of maps, with no double buffering:
  the pipeline idles while the next group's weights load.
- **Layout, ports and handshake.** The memory layout, the separate memory
  ports (two reads for MemRD, one word write for MemWR, a read and a vector
  write for LRN), the valid/ready handshakes and the channel depths (4) are
  this design's own choices. No memory controller or arbiter is included.
- **Not built.** Bias, activation functions and input padding are not
  described by the source and are not built. Output map counts must be a
  multiple of CU_NUM.
- **Pooling window.** The window is (L+1)×(L+1) with L = 2. VGG-16's 2×2
  pooling needs a build with `POOL_L = 1`.
- **LRN.** Only the across-maps variant is built. The sum of squares is
  assumed, because the source's pseudo-code writes a plain sum. The table
  contents and `seg_base` are supplied by the host.
- **Outside this design.** The host CPU, the PCIe link, the DDR3 memory and
  its controller are not part of this design. The testbenches use a
  behavioural memory (`tb/gmem_model.sv`).

## Files

| file | contents |
|---|---|
| `rtl/pipecnn_pkg.sv` | types, layer configuration, float functions |
| `rtl/channel_fifo.sv` | inter-kernel channel |
| `rtl/conv_cu.sv`, `rtl/conv_kernel.sv` | convolution pipeline and kernel |
| `rtl/memrd.sv`, `rtl/memwr.sv` | data movers |
| `rtl/pool_kernel.sv`, `rtl/lrn_kernel.sv` | pooling and LRN kernels |
| `rtl/pipecnn_top.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_fp32` for the float functions |
| `tb/fp_ref_pkg.sv`, `tb/gmem_model.sv` | reference float arithmetic (double precision, rounded by hand) and behavioural memory |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog ends a hung run. For example, the end-to-end test at the default
sizes (about a minute, mostly compilation):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb --top-module tb_pipecnn_top \
  rtl/pipecnn_pkg.sv tb/fp_ref_pkg.sv tb/tb_pipecnn_top.sv
./obj_dir/Vtb_pipecnn_top
```

Packages go first on the command line; `-y rtl -y tb` lets Verilator find
every module by its file name. Any other testbench runs the same way with its
own name.

`tb_pipecnn_top` runs four launches through the full-size top:

1. a convolution with two map groups and 3×3 max pooling;
2. a stride-2 convolution with average pooling;
3. an FC layer over a batch of 32, with pooling off;
4. two LRN passes.

It compares every result with a reference computed in the testbench. It also
fails if any of the following never occurred: a memory stall, convolution
back-pressure, a weight-cache reload, each pooling mode, each layer mode, and
LRN look-ups in both the first and the higher table segments. The per-module
testbenches use small sizes through parameter overrides. Their comments say
what each one checks.
