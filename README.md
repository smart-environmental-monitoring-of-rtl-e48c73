# Tiny U-Net accelerator for radar oil-slick thickness maps

A drone flies over the sea with a nadir-looking wideband radar. The radar measures
the backscatter of every ground cell at 9 frequencies (4 to 12 GHz in 1 GHz steps).
A compact U-Net turns this 128 × 128 × 9 cube into a map that gives each cell one
of 11 classes. Class 0 is clean water, and class *k* is an oil film *k* mm thick.
The network is small enough (about 118 k int8 weights) to keep entirely on chip on
the drone's FPGA.

This RTL implements that network as an int8 inference engine. It is based on the
paper *Smart Environmental Monitoring of Marine Pollution using Edge AI* (Moursi,
Wehn, Hammoud). The paper specifies the network: layer types, kernel sizes,
channel counts, image size, 8-bit quantisation and the number of classes. It does
not describe its FPGA design beyond resource counts, power and latency. Everything
below the network level is therefore this design's own, and it is marked as such.

## The network

A standard U-Net has 4 encoder blocks, a bottleneck and 4 decoder blocks, with
64 → 1024 channels. The paper compresses it along two axes:

* **B**: the number of blocks on each side (1 to 4);
* **F**: the channel reduction factor, so that level *l* has 64·2^l / F channels.

The chosen point is **B = 2, F = 4**. Counting weights with this reading of B
(B encoder blocks + bottleneck + B decoder blocks) reproduces the paper's model
sizes: 0.11 MB here, 29.6 MB for the full U-Net, and 7.35, 1.78, 0.39 and 0.002 MB
for other points. The layer list that `unet_pkg::layer_desc` generates is:

| # | operation                          | output     | in → out channels |
|---|------------------------------------|------------|-------------------|
| 0 | 3×3 conv + BN + ReLU               | 128 × 128  | 9 → 16            |
| 1 | 3×3 conv + BN + ReLU (kept: skip 0)| 128 × 128  | 16 → 16           |
| 2 | 2×2 max pool                       | 64 × 64    | 16                |
| 3 | 3×3 conv + BN + ReLU               | 64 × 64    | 16 → 32           |
| 4 | 3×3 conv + BN + ReLU (kept: skip 1)| 64 × 64    | 32 → 32           |
| 5 | 2×2 max pool                       | 32 × 32    | 32                |
| 6 | 3×3 conv + BN + ReLU (bottleneck)  | 32 × 32    | 32 → 64           |
| 7 | 3×3 conv + BN + ReLU (bottleneck)  | 32 × 32    | 64 → 64           |
| 8 | 2×2 transposed conv, stride 2      | 64 × 64    | 64 → 32           |
| 9 | 3×3 conv + BN + ReLU on [skip 1, up]| 64 × 64   | 32+32 → 32        |
|10 | 3×3 conv + BN + ReLU               | 64 × 64    | 32 → 32           |
|11 | 2×2 transposed conv, stride 2      | 128 × 128  | 32 → 16           |
|12 | 3×3 conv + BN + ReLU on [skip 0, up]| 128 × 128 | 16+16 → 16        |
|13 | 3×3 conv + BN + ReLU               | 128 × 128  | 16 → 16           |
|14 | 1×1 conv + arg-max                 | 128 × 128  | 16 → 11 classes   |

The 3×3 convolutions use stride 1 and zero padding 1, so the image size holds
within a level. In a decoder, the concatenated input puts the skip tensor's
channels first and the upsampled ones after. The whole network is 418,381,824
multiply-accumulates per scene.

The network structure follows the paper. Some details are this design's own
reading:

* The paper's text orders the block as conv → batch norm → ReLU, while its figure
  legend reads "Conv 3x3, ReLU, BN". The text order is used here, because it lets
  batch norm fold into the per-channel scale.
* The transposed convolutions get no BN or ReLU.
* The classifier outputs the arg-max. It does not output probabilities.

## Number format

Weights and activations are signed 8-bit integers with zero point 0. Every
convolution accumulates in 32 bits. Each output channel *o* has a parameter entry
(`qparam_t`) with a 32-bit bias, a 16-bit unsigned multiplier `mult` and a 6-bit
`shift`. These represent the folded batch norm and the requantisation scale:

    t = (acc + bias) * mult
    t = (t + 2^(shift-1)) >>> shift        (no rounding term when shift = 0)
    t = max(t, 0)                          (layers with ReLU)
    y = clamp(t, -128, 127)

The classifier layer does not requantise. For each pixel it takes the arg-max of
`acc + bias` over the 11 classes, and a tie goes to the lower class. This equals
the arg-max of the real-valued logits as long as the last layer uses one output
scale for all classes.

Max pooling works on the int8 values directly. The input cube must arrive already
normalised (zero mean, unit variance, as in training) and quantised to int8. That
conversion is the host's job.

The paper states only that the weights are quantised to 8 bits by post-training
quantisation. This exact arithmetic is this design's choice. A model exported
with real-valued scales has to be converted into (bias, mult, shift) offline.

## How a layer is computed

One `layer_engine` executes all 15 layers in turn. `unet_ctrl` hands it one
descriptor (`unet_pkg::layer_t`) per layer. The engine walks the output tensor in
raster order. For each pixel it steps through the channel groups, with `LANES` =
16 output channels per group. For each group it feeds one operand per cycle to
`mac_array`. A conv operand is `ICP` = 8 consecutive input channels of one tap:

* **3×3 conv**: the operands are 9 taps × (input channels / 8). A tap outside the
  image is fed as 0, which implements the zero padding. If the input is
  concatenated, `concat_addr` sends channel *c* either to the skip tensor or to
  the upsampled tensor. Neither tensor is copied.
* **transposed conv**: output pixel (y, x) reads input pixel (y/2, x/2) with
  kernel tap (y mod 2, x mod 2). The operands are the input channels, 8 at a time.
* **1×1 conv**: the operands are the input channels, 8 at a time. The result goes to `argmax`
  and then to the class map.
* **max pool**: 4 operands, each a whole 16-byte word (16 channels of one
  window pixel). `maxpool` keeps the per-lane maximum.

Each cycle, 8 activation bytes go to all lanes. Each lane multiplies them by its
own 8 weight bytes and adds the dot product to its sum, so the array has
16 × 8 = 128 multipliers (the paper's FPGA design uses 212 DSP slices). Every
input channel count must be a multiple of 8. The 9-channel radar input is
therefore stored as 16 channels, and the 7 padding channels meet zero weights.
The weights are stored in exactly the order they are consumed, so the weight
memory is read at one 128-byte word per cycle.

The pipeline has four stages:

    issue   addresses to act_mem / weight_mem / qparam_mem
    s1      read data valid; MAC (or max) updates; last operand of a group
            also latches that group's parameters
    s2      sums final -> requant (or argmax) combinationally
    s3      registered write of 16 bytes (or one class); lands at the next edge

A new group's first operand restarts the accumulators, so groups follow each
other without bubbles. s2 reads the finished sums in the cycle in which the next
group's first operand is being added, so even a one-operand group works. The
shortest groups are the classifier's (2 operands), so the feature write port
sees at most one write every 2 cycles.

## Timing

A layer of *N* operands takes *N* + 4 cycles from the engine's start to its done
pulse. The sequencer adds 3 cycles per layer, and the run counter 1 more. So a
whole scene takes

    cycles = Σ_layers (N_layer + 7) + 1
    N = H·W·⌈Cout/16⌉·9·Cin/8   (3×3 conv)
    N = H·W·⌈Cout/16⌉·Cin/8     (transposed / 1×1 conv)
    N = H·W·⌈Cout/16⌉·4       (max pool)

where H × W is the output size and Cin is the stored channel count (16 for the
radar input). For the main configuration this gives **3,432,554 cycles** for
418,381,824 MACs, which the full-size testbench checks exactly.

The paper reports 27.5 ms per scene on its FPGA, with 212 DSP slices. It gives no
clock. This engine reaches 27.5 ms at a clock of about 125 MHz. No synthesis or
timing analysis was done, so whether the 8-input dot product and the 32-bit
requantisation close timing at that clock is not shown. About 95 % of the
multiplier slots do useful work (counting zero-padding taps as work); the rest is
lost to the padded radar channels and the 11-of-16-lane classifier.

## Memories and data layout

All tensors use HWC byte order: pixel *p*, channel *c* of a *C*-channel tensor
at base *B* is byte *B* + *p*·*C* + *c*. The feature memory `act_mem` is organised
in 16-byte words, with byte strobes for host writes. It holds:

| region             | bytes    | use |
|--------------------|----------|-----|
| A: 0 … 262,143     | 262,144  | radar input (16 stored channels), then ping-pong outputs |
| B: 262,144 …       | 262,144  | ping-pong outputs |
| skip 0: 524,288 …  | 262,144  | layer 1 output, read by layers 2 and 12 |
| skip 1: 786,432 …  | 131,072  | layer 4 output, read by layers 5 and 9 |

That is 917,504 bytes in total. The input is overwritten during a run.

Weight memory (`weight_mem`) holds 928 words of 128 int8 weights (16 lanes × 8
input channels). Layers are stored in order. Within a layer the order is channel
group, then tap (row-major for 3×3; (dy, dx) for transposed conv), then group of
8 input channels. Byte *l*·8 + *k* of a word is the weight from input channel
icgroup·8 + *k* to output channel group·16 + *l*. The 11-class layer is padded to
16 lanes, and the radar input to 16 channels, with zero weights.

Parameter memory (`qparam_mem`) has one `qparam_t` per output channel. Entry
index = (layer's first group + group)·16 + lane. It comes to 25 words.

The class map (`class_map_mem`) holds one 4-bit class per pixel.

The memories total 8.38 Mbit. The paper reports 175 block RAMs (about 6.45 Mbit)
on its FPGA, so its implementation must keep less on chip than this one does.

## Using it

`tiny_unet_top` is the top. Run a scene as follows:

1. Hold `rst_n` low for a cycle, then release it.
2. Write every weight word (`w_we`, `w_addr`, `w_data`) and parameter entry
   (`p_we`, `p_idx`, `p_data`). These stay loaded across runs.
3. Write the radar cube byte by byte: `in_we`, `in_addr` = (y·128 + x)·16 + c
   for c < 9, `in_data`. The padding channels 9 … 15 need not be written.
4. Pulse `start`. `busy` stays high and `layer` shows the running layer. `done`
   pulses when the map is complete, and `cycles` then holds the run time.
5. Read the map: set `map_addr` = y·128 + x and get `map_class` one cycle later.

All memory reads have one cycle of latency. Host writes are ignored while `busy`
is high, and an assertion flags any attempt.

Parameters: `IMG`, `CIN`, `NCLS`, `NB`, `CBASE`, `F`, `LANES` and `ICP`. All memory sizes
and the layer list follow from them through the functions in `unet_pkg`. Elaboration
checks these constraints:

* `LANES` is a power of two;
* `CBASE/F` is a multiple of `LANES`;
* `IMG` is divisible by 2^`NB`;
* `NCLS` ≤ `LANES`;
* `ICP` is a power of two that divides `LANES`.

## Files

* `rtl/unet_pkg.sv`: types (`layer_t`, `qparam_t`, `op_e`), the layer walk, and
  the memory-size and cycle functions.
* `rtl/tiny_unet_top.sv`: top level (sequencer, engine, four memories, host port mux).
* `rtl/unet_ctrl.sv`: layer sequencer with the constant layer table.
* `rtl/layer_engine.sv`: address generation, pipeline, datapath instances.
* `rtl/mac_array.sv`, `rtl/requant.sv`, `rtl/maxpool.sv`, `rtl/argmax.sv`,
  `rtl/concat_addr.sv`: datapath pieces.
* `rtl/act_mem.sv`, `rtl/weight_mem.sv`, `rtl/qparam_mem.sv`,
  `rtl/class_map_mem.sv`: memories.
* `tb/unet_ref_pkg.sv`: independent golden model of the whole quantised network.
* `tb/tb_*.sv`: one self-checking testbench per module, plus `tb_tiny_unet_full`
  at the default size and `tb_tiny_unet_depths` for B = 1, 3 and 4.
* `tb/unet_scene_check.sv`: one checked scene through a top of given B and F.

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself through a
watchdog.

The end-to-end benches draw random int8 weights, parameters and input. The golden
model in `unet_ref_pkg` computes the network with plain loops over whole tensors,
and the benches compare every pixel of the class map and the exact cycle count.
They also confirm that every mechanism occurred: zero padding, ReLU clipping,
saturation, pooling, upsampling, both skip concatenations, and more than one
class in the output.

* `tb_tiny_unet_top` uses a 16 × 16 image with the real channel counts and runs
  two scenes, in about 1 s.
* `tb_tiny_unet_full` runs the default 128 × 128 × 9 configuration, in about 20 s
  including the Verilator build.
* `tb_tiny_unet_depths` runs three other members of the family side by side:
  B = 1, 3 and 4, all with F = 4, on 16 × 16 cubes. Each one gets its own
  `tiny_unet_top`, driven by `unet_scene_check`.

The weights are random, not trained, because the trained model is not part of
this design. The benches therefore prove that the hardware computes the
quantised network exactly. They say nothing about segmentation quality.

With Verilator 5, run from the folder that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
        rtl/unet_pkg.sv tb/unet_ref_pkg.sv tb/tb_tiny_unet_full.sv \
        --top-module tb_tiny_unet_full -o sim
    ./obj_dir/sim

Replace the testbench name to run any other bench. The block benches need only
`rtl/unet_pkg.sv` in front of them.

## Not covered

The radar front end, the drone, and the processing system and DRAM that feed
the accelerator are outside this RTL. The top exposes plain load and read ports
where they would connect. The input normalisation is also left to the host.
