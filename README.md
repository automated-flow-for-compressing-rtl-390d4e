# Binary convolution accelerator with depth-first data order

This is a small FPGA accelerator for the binarised convolution layers of a
quantised CNN: 1-bit weights (+1/-1), 2-bit activations (0..3) and 32-bit
sums. It is meant for a low-cost FPGA SoC, where an ARM host runs the network
and hands each binary convolution to the accelerator through shared off-chip
DRAM. The accelerator has little on-chip RAM, so every layer streams its data
from DRAM. The design rests on one idea: **store every tensor depth first**,
as height x width x depth with the channel index varying fastest. With that
order:

* 32 consecutive channels of one pixel, called a *D-bar*, are one packed word
  for 1-bit weights. For 2-bit activations they are two words. A processing
  element consumes a whole D-bar per cycle, with no masking or re-packing.
* For an output pixel, the part of the input under kernel row `r` is
  `Kw x Depth` consecutive elements in memory. The whole `Kh x Kw x Kd`
  window therefore takes only `Kh` address jumps, i.e. `Kh` long bursts. A
  width-first layout needs `Kh x Kd` short bursts.
* A row of processing elements that works on different kernels produces
  consecutive output channels of the same pixel. Those are consecutive
  addresses in the output tensor, so each pass is written back as one burst.

The RTL is SystemVerilog-2017. It was written from a short published
description of such an accelerator (PE/PEN structure, word widths, data
order). That description gives what the blocks do but not how they are built.
Everything below the block level is this implementation's own design:
handshakes, buffer sizes, the schedule and the memory layout formulas. The
section "What is given and what is chosen" separates the two.

## Arithmetic of the processing element (`bnn_pe`)

A kernel word `w` holds 32 weights. Bit `i` is channel `i` of the D-bar, and
1 means +1, 0 means -1. An input D-bar holds the 32 activations as two
bit-planes, `x[0]` (LSB) and `x[1]` (MSB). The dot product is

    sum_i a_i * s_i  =  sum_b 2^b * ( 2*popcount(x[b] & w) - popcount(x[b]) )

so each PE needs two AND/popcount pairs and a few adders, and no multipliers.
The PE adds this to a signed 32-bit accumulator. `clr` starts a new sum, and
when `en` is also high it loads the current product, so back-to-back windows
need no idle cycle. The per-cycle product ranges from -96 to +96.

An activation of 0 contributes nothing whatever its weight. A layer whose
depth is not a multiple of 32 is therefore padded with zero activations and
gives exact results. Kernel bits in the padded channels are don't-care.

`bnn_pen` is a row of `NUM_PE` (default 16) PEs. They all get the same input
D-bar, and each gets the word of a different kernel. This is where input reuse
comes from: one D-bar read feeds 16 output channels.

## Memory layout

The whole layer is in word-addressed off-chip memory, with 32-bit words. With
`Dw = depth/32`, `Ow = Iw-Kw+1` and `Oh = Ih-Kh+1`:

| tensor  | word address                                         | word contents |
|---------|------------------------------------------------------|---------------|
| input   | `in_base  + ((y*Iw + x)*Dw + dc)*2 + plane`           | 32 activation bits, one bit-plane |
| kernels | `k_base   + ((k*Kh + kh)*Kw + kw)*Dw + dc`            | 32 weight bits |
| output  | `out_base + (oy*Ow + ox)*OFM + k`                      | signed 32-bit sum |

The convolution uses stride 1 and no implicit padding. A padded layer is
passed as its padded input tensor. The outputs are raw sums. Turning them into
the next layer's 2-bit activations (the threshold step that folds scaling,
batch-norm, bias and activation quantisation) is left to the host, like the
non-binary first and last layers.

## Schedule (`accel_ctrl`)

```
for each group of NUM_PE output channels (the last group may be partial):
    one burst: the group's kernels (they are contiguous) -> kernel_buffer
    for oy in 0..Oh-1, ox in 0..Ow-1:
        Kh bursts of Kw*Dw*2 words: the window, kernel row by kernel row -> input_buffer
        PEN: D-bar i of the window against word i of each kernel, i = 0..Kh*Kw*Dw-1
        one burst of min(NUM_PE, channels left) sums -> out_writer
```

These are the parts that are hardest to follow in the code:

* **Fetch and compute overlap.** `input_buffer` counts the D-bars that are
  complete (both planes arrived). The controller issues D-bar `i` to the PEN
  as soon as that count exceeds `i`. The PEN therefore runs right behind the
  incoming burst. A cycle in which it waits is counted in `perf_starve`.
* **Kernel and input indices line up.** The window is written into
  `input_buffer` in fetch order (kh, kw, dc). That is the same order in which
  kernel words sit in each kernel bank, so one address `i` reads both RAMs.
* **Write-back is decoupled.** `out_writer` copies all NUM_PE sums when it
  accepts a command, so the PEN can start the next pixel at once. The
  controller waits only when the previous burst is still being written. Those
  cycles are counted in `perf_out_wait`.
* **Pipeline.** A read is issued in cycle t. The RAM data and the PEN enable
  arrive in t+1, and the sums are final in t+2. The controller hands them to
  the writer in the cycle after that.

The PEN does `Kh*Kw*Dw` cycles of work per pixel and group, one D-bar per PE
per cycle, and the testbenches check this exact count. The window, however,
has `2*Kh*Kw*Dw` bus words. With a 32-bit bus delivering at most one word per
cycle, a layer is bus-bound at about two cycles per PEN cycle, plus Kh burst
set-ups per pixel. The window is also fetched again for every channel group.
These costs follow from keeping only one window on chip. For example, a
160x160x32 input with eight 3x3x32 kernels takes 225k PEN cycles. With 10%
random bus stalls, the whole layer takes 832k cycles. Small windows like this
one pay most for the three burst set-ups per pixel.

## Interfaces

`bnn_accel` ports:

* Control: set `cfg` (a `layer_cfg_t` from `bnn_pkg`), then pulse `start`.
  `busy` stays high until a one-cycle `done`. The `cfg` fields are `ih`, `iw`
  (input size after padding), `id_words` (depth/32), `kh`, `kw`, `ofm`, and
  the three base addresses. `error` is set with `done`, with nothing
  transferred, if the window `kh*kw*id_words` is larger than the buffers or a
  size is zero or larger than the input. `perf_compute`, `perf_starve` and
  `perf_out_wait` are cycle counters that are cleared by `start`.
* Read channel: hold `rd_req`, `rd_addr` and `rd_len` until `rd_gnt`. The
  memory then returns exactly `rd_len` words in order on `rd_data`, one in
  each cycle that has `rd_dvalid` high. Gaps and latency are arbitrary. Only
  one burst is outstanding at a time.
* Write channel: `wr_valid` is high for each beat. `wr_addr` and `wr_len`
  stay constant for the whole burst, and a beat is transferred when
  `wr_valid && wr_ready`. Beat `j` belongs at `wr_addr + j`.
* Reset: `rst_n` is active-low and asynchronous for all control state. The
  RAM contents are not reset.

Assertions in `burst_reader` and `out_writer` check the bus rules: a request
stays stable until it is granted, no data arrives without a request, write
bursts stay stable under back-pressure, and no burst is longer than NUM_PE.

## Module map

| file | role |
|------|------|
| `rtl/bnn_pkg.sv` | word sizes, `layer_cfg_t`, D-bar type |
| `rtl/bnn_pe.sv` | one PE: popcount dot product + 32-bit accumulator |
| `rtl/bnn_pen.sv` | NUM_PE PEs sharing one input D-bar |
| `rtl/kernel_buffer.sv` | NUM_PE banks x KDEPTH kernel words, common read address |
| `rtl/input_buffer.sv` | IDEPTH D-bars; gathers the 2 bit-plane words of each D-bar into one RAM word |
| `rtl/burst_reader.sv` | read master, one burst per command |
| `rtl/out_writer.sv` | write master, one burst of sums per command |
| `rtl/accel_ctrl.sv` | the schedule above, address generation, status and counters |
| `rtl/bnn_accel.sv` | top level |
| `tb/mem_model.sv` | behavioural DRAM with random grant delays, data gaps and write back-pressure |

## Sizes

The defaults are 16 PEs and 512-word kernel banks and input buffer. That is
16 x 512 x 32 bits for the kernels plus 512 x 64 bits for the input, 288
Kbit in all, which is small next to the block RAM of a mid-size Cyclone V.
The largest window of a binarised YOLOv2 with a 320x320 input is 3x3x1280
(the layer after the pass-through concatenation), or 360 D-bars, so every
binary layer of that network fits. Input depths 32..1280 are multiples of 32,
and output counts that are multiples of 8 but not 16 leave the last group
half used. Counting only PEN cycles, all binary layers of that network take
about 16.8 M cycles. Because of the bus bound described under Schedule, the
real figure is at least about twice that.

## What is given and what is chosen

Taken from the published description: a PE processes 32 one-bit kernel
elements per word and is followed by a 32-bit accumulator; the PEN is an array
of PEs that share the input and hold different kernels, with at least 16 PEs;
1-bit weights and 2-bit activations; depth-first (H x W x D) order for inputs,
kernels and outputs; burst transfers to off-chip memory with Kh jumps per
kernel window; one-D-bar-per-access local RAM; limited on-chip memory;
output feature maps a multiple of 8 and input maps a multiple of 16.

Chosen here: the popcount formulation and the weight and bit-plane encodings;
one PEN row rather than a 2-D PE grid; buffer depths; one window held on chip
at a time; the group-outer, pixel-inner loop order; the overlap of fetch and
compute; the bus handshakes; stride 1 without implicit padding; the error
check and the performance counters.

Not included: the host CPU, the SoC interconnect, the DRAM, the register
interface through which a host would write `cfg` (here it is a plain port),
and the threshold/quantisation step between layers.

## Simulating

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`.
Each one compares the design against a reference computed element by element
in the testbench. To build and run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/bnn_pkg.sv \
          tb/tb_bnn_accel.sv --top-module tb_bnn_accel -Mdir obj -o sim
./obj/sim
```

* `tb_bnn_pe`, `tb_bnn_pen`: random words, every sum checked. This includes
  the +96/-96 extremes and back-to-back windows.
* `tb_kernel_buffer`, `tb_input_buffer`: bank selection, bit-plane packing,
  the D-bar count and rewinding.
* `tb_burst_reader`, `tb_out_writer`: burst fields, beat order and count,
  done pulses, zero-length commands and back-pressure.
* `tb_accel_ctrl`: the controller alone. The exact sequence of read and write
  commands is checked against the schedule above, along with the kernel bank
  routing and the PEN read order.
* `tb_bnn_accel`: the whole accelerator at 4 PEs with 64-word buffers, on
  four layers against the DRAM model. It checks every output word, the PEN
  cycle count, Kh bursts per window, and that nothing is written past the
  output. It also requires each of the following to occur at least once:
  several groups, a partial group, read stalls, read gaps, write
  back-pressure, PEN starvation, waiting on the writer, and a rejected
  configuration.
* `tb_bnn_accel_full`: the same checks with every parameter at its default.
  It runs a 3x3x256 layer with 32 maps, a 3x3x1280 window with 24 maps, and a
  1x1 layer under heavy write back-pressure.
* `tb_workload_fig5`: a full 160x160x32 layer with eight 3x3x32 kernels at the
  default size. All 158x158x8 outputs are checked.
