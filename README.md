# An AdderNet convolution accelerator in SystemVerilog

An adder neural network (AdderNet) is a convolutional network that does not
multiply. A normal convolution scores each input window against a filter with
a dot product, `sum F*W`. AdderNet scores it with the negated L1 distance
instead:

    F_out[h][w][o] = - sum over ky, kx, i of | F_in[h+ky][w+kx][i] - W[ky][kx][i][o] |

Each multiply-accumulate turns into one subtraction, an absolute value and an
addition. If features and weights are quantised with **one shared scale
factor**, the raw integers can be subtracted directly, with no binary-point
alignment. So the whole convolution core is adders and multiplexers. By the
original authors' resource model, at 16 bits and 64 channels per adder tree
this takes about 80 % less logic than a multiplier core.

This repository implements the general-purpose AdderNet accelerator: a
64 x 16 array of adder kernels (1024 in parallel), the on-chip buffers around
it, a batch-norm/activation unit and AXI interfaces to a host processor. The
host is the ARM side of a Zynq-class SoC. Everything is synthesizable
SystemVerilog-2017, and each module has a self-checking testbench.

## 1. The arithmetic

### The adder kernel (`adder_kernel`)

`|a - b|` for two signed 16-bit values is made the "two-adder" way:

* one subtractor forms `a - b` and another forms `b - a`, in parallel;
* a multiplexer, steered by the sign of `a - b`, passes whichever result is
  non-negative.

This is faster than comparing first and then subtracting, because the
comparator and the subtractor would otherwise be in series. The result always
fits in 16 unsigned bits, since the largest difference is 2^16 - 1. The kernel
is combinational.

### The adder tree (`adder_tree`)

The 64 distances of one output channel go into a binary tree of 63 adders.
Each level is one bit wider than the level before, so the sum has
16 + log2(64) = 22 bits. Every level is registered, so the tree has a latency
of 6 clocks and takes a new vector every clock.

### The convolution core (`conv_kernel`)

The core takes **one feature vector of P_IN = 64 input channels** per clock.
It broadcasts that vector to **P_OUT = 16 groups**. Each group has its own
64 weights, 64 kernels and one tree. In one clock the core produces 16
partial sums, one per output channel. The kernel outputs are registered once
before the trees, so the core's latency is `CONV_LAT = 1 + 6 = 7` clocks. Any
side-band tag given at the input leaves with its data.

### Where the minus sign goes (`output_buffer`)

One output pixel usually needs more than 64 input values. A 3x3 window over
512 channels has 4608. So each pixel takes `N_ACC` passes through the core,
and the **adder-tree output buffer** accumulates them:

* the first pass of a pixel loads the 16 accumulators;
* each later pass adds to them;
* the last pass writes the pixel's 16 totals into the row chosen by the
  controller.

The accumulators *subtract* every tree sum, so the stored value already is
AdderNet's `-sum|F - W|`. They are 32 bits wide and signed. That leaves room
for 22-bit sums over up to 1024 passes.

## 2. Block diagram

```
            host (ARM + DRAM)  --  AXI interconnect (outside this design)
               |AXI4-Lite           |AXI4 (data)            |AXI4-Lite
               v                    v                       v
          +-----------+    +-----------------+       +-------------+
          | bn_control|    |  axi_data_port  |       | conv_control|
          +-----------+    +-----------------+       +-------------+
             | cfg,row      | writes      ^ results     | row reads, pass tags
             |     +--------+--------+    |             |
             |     v        v        v    |             v
             |  BN buf   feature   weight |    +------------------+
             |     |      buffer   buffer |    |   conv_kernel    |
             |     |         \       /    |    | 16 x 64 kernels  |
             |     |          +--> ------------> 16 adder trees   |
             |     |                      |    +------------------+
             v     v                      |             |
          +------------+   +--------------+--+          v
          |  bn_unit   |<--| output_buffer   |<---------+
          +------------+   | (accumulate -)  |
               |           +-----------------+
               +--> result words back over AXI4
```

The batch-norm stage runs **on the way out**. When the host reads the result
region, each stored row goes through the BN unit and is returned as 16-bit
activations. The same run can therefore be read several times with different
BN settings. That is also how the testbench exercises the unit.

## 3. How a layer maps onto a run

The hardware computes a fixed pattern, and the host arranges its data to
match it. This is the part to understand before using the design.

A **run** is set by three numbers: `N_PIX` output pixels, each made of
`N_ACC` passes, covering one group of 16 output channels. Pass `s` of pixel
`p`:

* reads **feature row** `FEAT_BASE + p*N_ACC + s`, which holds 64 input values;
* reads **weight row** `WGT_BASE + s`, which holds 16 x 64 weights: lane
  `o*64 + i` is the weight of output channel `o` for input lane `i`;
* is accumulated into **output row** `OUT_BASE + p`.

So the host stores the features in unrolled ("im2col") order. For each output
pixel, it writes the Ky*Kx*CH_in values of that pixel's window as
`N_ACC = ceil(Ky*Kx*CH_in / 64)` consecutive rows. It orders the weights the
same way, so that lane `i` of weight row `s` meets lane `i` of feature row `s`.
Padding lanes are zero in both the feature and the weight, and a zero pair
adds `|0 - 0| = 0`.

Example: a 3x3 layer over 64 input channels has `N_ACC = 9`. A 56 x 56 output
map holds 3136 pixels and needs 28 224 feature rows. The feature buffer holds
4096, so the host splits the map into runs of at most 455 pixels
(455 x 9 = 4095 rows). Each group of 16 output channels is a separate
run with its own weight tile.

The weight buffer (128 rows) holds a tile of up to 128 passes, such as
3x3x512 (72 passes). The output buffer (4096 rows) holds up to 4096 pixels.
Pooling, residual additions and layer-to-layer data movement are left to the
host.

## 4. Programming model

### AXI4 data port (`axi_data_port`)

Slave, 32-bit data. Address bits [21:20] select the region. Inside a region,
byte address / 4 is a word index.

| region | base        | access | contents |
|--------|-------------|--------|----------|
| 0      | 0x0000_0000 | write  | feature buffer: row r, word c at index r*32 + c; word c = {lane 2c+1, lane 2c} |
| 1      | 0x0010_0000 | write  | weight buffer: row r, word c at index r*512 + c; lanes o*64+i, two per word |
| 2      | 0x0020_0000 | write  | BN buffer: row r, word o at index r*16 + o = {gamma[o], bias[o]} |
| 3      | 0x0030_0000 | read   | results: output row r, word c at index r*8 + c = {BN(ch 2c+1), BN(ch 2c)} |

* Bursts are INCR; other burst types are treated as INCR.
* One write and one read burst can be in progress at a time.
* A write beat takes one clock. A read beat takes three clocks: buffer read,
  BN unit, data.
* These beats get SLVERR and are dropped: a beat past the end of a region, a
  write to region 3, and a read from regions 0 to 2.

### Conv control (AXI4-Lite, word registers)

| idx | name      | meaning |
|-----|-----------|---------|
| 0   | CTRL      | write bit0 = 1: start. Ignored while busy, or if N_PIX or N_ACC is 0 |
| 1   | STATUS    | bit0 busy, bit1 done (cleared by the next start) |
| 2   | N_PIX     | output pixels in the run |
| 3   | N_ACC     | passes per pixel |
| 4-6 | FEAT_BASE, WGT_BASE, OUT_BASE | first row in each buffer |
| 7   | CYCLES    | clocks the last run took |

The size registers can only be written while the accelerator is idle.
`done_irq` is high from the end of a run until the next start.

### BN control (AXI4-Lite)

| idx | name     | meaning |
|-----|----------|---------|
| 0   | BN_CFG   | bit0 BN enable, bit1 ReLU enable |
| 1   | BN_SHIFT | right shift, 0..31 |
| 2   | BN_ROW   | BN-buffer row, i.e. which 16 output channels' parameters |

### The BN unit (`bn_unit`)

Each lane computes, exactly (the intermediate is wide enough that nothing rounds before the shift):

    t = BN on ? (x + bias) * gamma : x
    t = t >>> shift                    (rescale to the shared quantisation step)
    t = ReLU on ? max(t, 0) : t
    y = saturate t to signed 16 bits

`bias` and `gamma` are signed 16-bit values. The unit has one register stage.

## 5. Timing and throughput

The sequencer issues one pass per clock with no gaps, so all 1024 kernels
are busy every clock during a run. A run takes

    CYCLES = N_PIX * N_ACC + CONV_LAT + 2 = N_PIX * N_ACC + 9 clocks

from the start write until `done`. The extra clocks are the buffer read, the
7-clock core, the store into the output buffer and the status update.

At 250 MHz, the frequency the original FPGA implementation reached, the peak
is 1024 kernels x 2 operations x 250 MHz = 512 GOPs. The published
figure for the convolution layers of ResNet-18 is 495 GOPs.

Nothing in the datapath can stall. The buffers accept a word every clock, the
core takes a pass every clock, and the output buffer accepts every result.

## 6. What follows the source and what is this design's own

Taken from the published design:

* the two-subtractor kernel with its sign-steered multiplexer;
* the broadcast of one feature vector to P_out kernel groups, each with its
  own weights and adder tree;
* the tree width DW + log2(P_in);
* DW = 16, P_in = 64, and 1024 kernels in total;
* the negated L1 similarity;
* the shared scale factor, which is why there is no alignment shifter;
* the set of blocks and their connections: feature, weight, BN and
  adder-tree output buffers, BN unit (add, multiply, activation), conv and
  BN control on AXI4-Lite, and the data path on AXI4.

This design's own choices (the source names these blocks but does not
describe them):

* all buffer depths, row layouts and the address map;
* the unrolled feature order, and the run/pass scheme of the controller;
* accumulating and negating in the output buffer;
* ReLU as the activation, the shift and 16-bit saturation after the
  multiply, and the BN parameter format;
* applying BN when results are read rather than in a separate sweep;
* the AXI slave role, the 32-bit bus, the single-outstanding bursts and
  3 clocks per read beat;
* the register maps, asynchronous active-low reset, and where the
  pipelines are cut.

Not included:

* the AXI interconnect and the host, which are outside the design;
* pooling, which the general-purpose design's diagram does not contain;
* the separate all-on-chip LeNet-5 accelerator that the source also
  reports.

## 7. Files, simulation and changing sizes

`rtl/`:

* `addernet_pkg.sv`: sizes, register maps and the AXI structs;
* `adder_kernel.sv`, `adder_tree.sv`, `conv_kernel.sv`: the datapath core;
* `lane_buffer.sv`: the feature, weight and BN buffers;
* `output_buffer.sv`, `bn_unit.sv`;
* `axil_slave.sv`, `conv_control.sv`, `bn_control.sv`, `axi_data_port.sv`:
  control and bus interfaces;
* `addernet_accel.sv`: the top.

`tb/` has one self-checking testbench per module, `tb_<module>.sv`. Each
prints `TB_RESULT checks=N failures=M` and has a watchdog.
`tb_addernet_accel` runs the whole accelerator at full size. It acts as the
host and does two runs: 4 pixels x 3 passes, then 6 single-pass pixels with
full-range data and non-zero base rows. It checks every result word against
a model, with BN off, BN on with ReLU, and with saturation, and it checks the
cycle count. Run from the repository root:

    verilator --binary --timing --assert -Irtl -I. -y rtl \
        --top-module tb_addernet_accel rtl/addernet_pkg.sv tb/tb_addernet_accel.sv
    ./obj_dir/Vtb_addernet_accel

Compiling the full-size top takes about two minutes; it then simulates in
well under a second. Replace the testbench name to run any other block. Most
block testbenches use reduced sizes.

To change the array size or data width, edit `P_IN`, `P_OUT` or `DW` in
`addernet_pkg.sv`. P_IN must be a power of two. `P_IN*DW` and
`P_OUT*P_IN*DW` must be multiples of 32, and P_OUT must be even. The
buffer depths are in the same package.
