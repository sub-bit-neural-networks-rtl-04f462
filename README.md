# A lookup-table accelerator for sub-bit neural network convolutions

A binary neural network (BNN) stores each 3x3 convolution kernel as nine
+1/-1 weights, that is 9 bits. Trained BNNs turn out to use only a small
part of the 512 possible binary 3x3 kernels in each layer. A *sub-bit*
network (SNN) exploits this: every layer gets a subset of only 2^tau binary
kernels (tau = 5 gives 32 kernels, 5/9 = 0.56 bit per weight), and each
kernel of the layer is stored as a tau-bit **kernel ID** pointing into that
subset.

The same fact also saves work. For one input channel at one output position,
a 3x3 layer has c_out kernels, but at most 2^tau different ones. So the
hardware convolves the 3x3 activation slice with each of the 2^tau subset
kernels once, keeps the 2^tau results in a lookup table (LUT), and then
serves every output channel with a table lookup by kernel ID and an
addition. With c_out = 128 and 32 kernels, 32 dot products replace 128.

This repository holds synthesizable SystemVerilog (IEEE 1800-2017) for such
an accelerator: an array of 64 processing engines (PEs), each a two-stage
pipeline of a pre-computing unit and an accumulator unit joined by a
double-buffered LUT. The architecture follows the hardware section of the
Sub-bit Neural Networks paper (Wang, Yang, Sun, Yao, ICCV 2021). The paper
describes the structure and the cycle budget; it evaluates the design with a
transaction-level model, not RTL. Widths, handshakes and the way data
reaches the PEs are this implementation's own choices and are listed below.

## Kernel encoding

A binary 3x3 kernel is a 9-bit word. The kernel is flattened row by row;
+1 is a 1 bit and -1 a 0 bit; the top-left weight is bit 8 and the
bottom-right weight bit 0. Read as a number, this word is the kernel's
index in the full set of 512 kernels: the kernel

    +1 -1 -1
    -1 +1 -1
    -1 +1 +1

is `9'b100010011` = 275. (The paper also speaks of indices 1..512; this
design uses the plain binary value 0..511.)

A layer's subset is 2^TAU such words, loaded into the subset memory at IDs
0..2^TAU-1. A weight of the layer is a TAU-bit ID into that memory.

## The processing engine

Each PE computes 128 output channels (the line-buffer width, LBW) of one
output pixel. It accumulates over the input channels one at a time. Each
input channel passes through two stages:

1. **Pre-computing** (`snn_precompute`, `snn_dot9`). For input channel c,
   the PE holds the 3x3 activation slice around its pixel. In cycle k
   (k = 0..31) it reads subset kernel k and forms its dot product with the
   slice. Because the weights are +-1, no multiplier is needed: each of the
   nine activations is passed or negated, then added in an adder tree. The
   result goes into LUT entry k of one bank in the same cycle.
2. **Accumulation** (`snn_accumulator`, `snn_line_buffer`). For input
   channel c-1, four lanes run in parallel. In cycle k, lane a takes the
   kernel ID of output channel a*32+k and looks it up in the other LUT bank.
   It adds the value to that channel's partial sum in the line buffer (LB)
   and writes the sum back. Four lanes times 32 cycles cover the 128
   channels.

Both stages take 32 cycles and run in the same cycles. The LUT (`snn_lut`)
has two banks of 32 entries: one is filled for channel c while the other is
read for channel c-1, and they swap at every phase. This is the whole trick
of the design: the 2^tau dot products and the c_out lookups overlap, and the
LUT never holds more than one slice's results.

Timeline of one round with three input channels (each phase 32 cycles):

    phase         0          1          2          3
    pre-compute   ch0->B0    ch1->B1    ch2->B0    -
    accumulate    -          ch0<-B0    ch1<-B1    ch2<-B0, drain
    LB            zero       +ch0       +ch1       +ch2 -> output buffer, LB cleared

During the last accumulation phase, the finished sum goes to the output
buffer (`snn_output_buffer`) instead of back to the LB, and the LB place is
set to zero. So the next round starts from a clear LB without spending extra
cycles. A round with num_cin input channels therefore takes
**(num_cin + 1) x 32 cycles**, provided that inputs arrive in time.

## The array

`snn_accel_top` puts NPE = 64 PEs side by side. All PEs work in lock step,
so one controller, one subset memory and one kernel-ID stream serve them
all. The PEs differ only in their activation slice. They cover 64 adjacent
output pixels of one output row at stride 1. PE p takes the 3x3 window
whose left column is p, out of a strip of 3 rows by 66 columns of the
current input channel (`snn_slice_buffer`). Neighbouring slices therefore
overlap.

The slice buffer holds the strip in use plus one prefetched strip. The
prefetched strip moves into use in the first cycle of a pre-computing
phase. In that same cycle, the slices are already taken from the
prefetched strip.

### Driving a round

| step | ports | what to supply |
|------|-------|----------------|
| 1 | `ks_we`, `ks_waddr`, `ks_wdata` | the layer's 2^TAU subset kernels |
| 2 | `start`, `num_cin` | pulse start with the number of input channels (1..MAX_CIN) |
| 3 | `s_valid`/`s_ready`, `s_data[3][NPE+2]` | one strip per input channel, in channel order: rows y-1..y+1, columns x0-1..x0+NPE, padding included |
| 4 | `w_valid`/`w_ready`, `w_ids[4]` | per input channel, 32 beats; beat k carries in `w_ids[a]` the ID for output channel a*32+k |
| 5 | `done`, `ob_raddr`, `ob_rdata[NPE]` | after `done`, read output channel `ob_raddr` of all PEs; the data appear one cycle later |

The first strip may be offered together with `start` and is then
prefetched. If the next strip has not arrived by the first cycle of a
pre-computing phase, or the kernel IDs for an accumulation cycle are
missing, the whole array holds for that cycle (`stall`). `w_ready` depends
on `w_valid` within the same cycle. A source must therefore not wait for
`w_ready` before raising `w_valid`.

The output buffer keeps its values until the next round's drain.
`ob_rdata[p]` is the value of output channel `ob_raddr` for the pixel at
column x0+p. Layers with more than 128 output channels, wider rows, more
rows or larger images take more rounds. Each new round recomputes the LUT.
Each output is the raw sum over input channels and the 3x3 window. Any
per-channel scaling factor, batch normalisation, activation function,
residual addition or stride-2 subsampling is applied outside the array.

### Number formats (this design's choice)

- Activations: signed ACT_W = 16-bit integers. The paper's deployment keeps
  activations non-binary but gives no format.
- LUT entries: ACT_W+4 = 20 bits. This is exact for nine terms.
- Partial sums: signed ACC_W = 32 bits. Sums over 512 channels need
  29 bits, so this is exact up to MAX_CIN = 512 channels.

## Cycle budget and the paper's workloads

Per round: (num_cin+1) x 32 cycles for 64 pixels x 128 output channels.
At the defaults, any 3x3 layer with up to 512 input channels runs,
including all binarized 3x3 layers of ResNet-18/34, VGG-small, ResNet-20
and the detection backbones the paper evaluates. 0.44-bit models
(16-kernel subsets) also run, on half the LUT. The following need changes:

- 0.67-bit models (64 kernels) need `TAU = 6`. A phase then takes
  max(2^TAU, LBW/NACC) = 64 cycles.
- 1x1 convolution layers (the ResNet-50 extension) are not supported.

This design's schedule does not reproduce the paper's timing. Counting
rounds for 224x224 ImageNet inputs, with stride-2 layers computed on the
stride-1 grid, the binarized 3x3 layers come to about 3.29 ms for
ResNet-18 and 6.74 ms for ResNet-34 at 1 GHz. The paper's transaction-level
model reports 1.159 ms and 2.329 ms for 64 PEs at 1 GHz. The paper does not
say how it maps pixels, channels and tiles onto PEs. The difference
probably lies in that mapping (7x7 and 14x14 layers leave most of a
64-pixel row of PEs idle here), not in the PE itself, whose 32-cycle stages
match the paper.

## Where this RTL departs from the paper or goes beyond it

- **Shared subset memory and controller.** The paper draws the subset
  inside the PE. Here one copy serves all PEs, because they use the same
  kernel at the same time.
- **Pixel-to-PE mapping, strip format, prefetch, handshakes and stall.** The
  paper only says that overlapping 3x3 slices are processed in parallel
  PEs. Everything about how activations and kernel IDs reach the PEs is this
  design's choice.
- **Drain in the last accumulation cycle.** The paper says the LB contents
  go to a dedicated output buffer and the LB is cleared. Doing both in the
  last accumulation phase is this design's choice.
- **Output buffer.** One round deep, with a registered read port. It is not
  double-buffered, so results must be read before the next round ends.
- **Kernel index range.** 0..511 as in the paper's figure, not 1..512 as in
  its text.
- **Not built:** the feature-map and weight memories, the tile scheduler
  and data loaders of the paper's performance model (known only by name),
  the 1x1 extension, and the full-precision first and last layers.

## Files

`rtl/` (one module or package per file):

| file | role |
|------|------|
| `snn_pkg.sv` | default sizes, kernel type |
| `snn_dot9.sv` | +-1 kernel x 3x3 slice dot product |
| `snn_subset_mem.sv` | 2^TAU x 9-bit kernel subset |
| `snn_precompute.sv` | pre-computing stage (Dot9 + LUT write) |
| `snn_lut.sv` | double-buffered LUT, 4 read ports |
| `snn_accumulator.sv` | 4 lookup-and-add lanes, drain |
| `snn_line_buffer.sv` | 128 partial sums, 4 x 32 segments |
| `snn_output_buffer.sv` | finished sums of a round |
| `snn_pe.sv` | one PE |
| `snn_controller.sv` | phase/cycle sequencing, bank swap, stall |
| `snn_slice_buffer.sv` | strip prefetch and overlapped slices |
| `snn_accel_top.sv` | the 64-PE array |

Defaults: TAU = 5, NPE = 64, NACC = 4, LBW = 128 follow the paper.
ACT_W = 16, ACC_W = 32 and MAX_CIN = 512 are this design's.

`tb/` holds one self-checking testbench per module (`tb_<module>.sv`),
plus `tb_snn_accel_top_full.sv`, which runs the array at its default
parameters. Every testbench compares against values computed independently
(direct convolution for the PE and the array). Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. The end-to-end
testbenches check the round latency of (num_cin+1) x 32 cycles. They fail
if a strip stall, a kernel-ID stall, overlapped stages, a prefetch, a round
after a drain or a subset reload never happened.

`tb_snn_workload_layers.sv` runs three whole layers on the 64-PE array,
zero padding included: a ResNet-20 CIFAR-10 layer (16 to 16 channels,
32x32), a ResNet-18 ImageNet first-stage layer (64 to 64, 56x56) and a
last-stage layer (512 to 512, 7x7). Together these take 116 rounds. Every
output value and every round's cycle count is checked. The run takes about
10 seconds.

## Simulating

With Verilator 5:

    verilator --binary --timing --assert -y rtl -Irtl rtl/snn_pkg.sv \
        tb/tb_snn_accel_top.sv --top-module tb_snn_accel_top -Mdir obj
    ./obj/Vtb_snn_accel_top

Replace the testbench name to run another one. `tb_snn_accel_top` uses
4 PEs. `tb_snn_accel_top_full` uses all 64 PEs and runs in seconds.
Verilator has only two states, so every register that is read is reset or
written first. Reset is asynchronous and active low.

## How far it has been checked

Every module and the full-size array pass their testbenches in Verilator,
and all RTL files pass Verilator lint and the slang front end of Yosys.
Each testbench was also run against a copy of its module with one
deliberate bug (for example, reading the wrong LUT bank, not clearing the
LB at the drain, or reversing the kernel bit order), and each of those runs
failed. No timing closure or area figures exist: the design has not been
through a synthesis flow to gates.
