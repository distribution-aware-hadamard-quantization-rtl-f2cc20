# DHQ: an 8-bit SIREN accelerator with Hadamard-shaped quantization

An implicit neural representation (INR) stores an image as a small neural
network. You give it a pixel coordinate (x, y) and it returns the pixel's
value. The network used here is SIREN: a multilayer perceptron whose hidden
layers apply `sin()`. Running such a network with 8-bit integers instead of
32-bit floats saves most of the logic and power. The hard part is that the
values to be quantized have very different distributions from layer to
layer. First-layer weights are roughly uniform. Middle-layer weights are
bell-shaped and narrow. Last-layer weights have two peaks. Hidden activations
are U-shaped, piled up near ±1 by the sine, and output activations are
bell-shaped again.

Distribution-aware Hadamard quantization (DHQ) handles all of these with a
single uniform quantizer. Before a vector is quantized, it is multiplied by a
Hadamard matrix. Every entry of the result is a ± sum of all the inputs, so by
the central limit theorem the entries come out bell-shaped whatever the input
distribution was. Because the matrix is orthogonal, the change can be undone
exactly inside the next layer's weights.

This repository holds synthesizable SystemVerilog for an accelerator that runs
a five-layer SIREN in W8A8 (8-bit weights, 8-bit activations) with this
scheme. It evaluates one pixel at a time and writes the image into an on-chip
result memory.

## The network

| layer | paper's name | shape (default) | after the MAC |
|---|---|---|---|
| 0 | input layer | 2 → 256 | sine, Hadamard, quantize |
| 1..3 | linear (hidden) layers | 256 → 256 | sine, Hadamard, quantize |
| 4 | output layer | 256 → OUT_CH | quantize only (no sine) |

Layers are numbered from 0 in the RTL. They are 1 to 5 in the usual
description of SIREN. `N_HID` (256), `N_MID` (3) and `OUT_CH` (1) are
parameters.

## Arithmetic of one layer (the part to read carefully)

All multiplications are int8 × int8. Sums and biases are int32.

For a hidden layer with input activation vector `a` (length N), an ordinary
layer would compute `z = W a + b`. With the orthonormal Hadamard matrix
`Hn = H/√N`, where `H` is the ±1 Sylvester matrix (`H_1 = [1]`,
`H_2n = [[H_n, H_n], [H_n, -H_n]]`), we have `Hn·Hn = I`. That gives

    W a = (W Hn) (Hn a)

The accelerator therefore works as follows:

* The weights are stored already multiplied by `Hn` on the input side and
  quantized: `W'' = round(W · H / √N / s_w)`. This is done offline, and the
  hardware never sees the original `W`.
* The activations are carried in the Hadamard domain. After a layer's sine,
  the whole output vector `s` goes through a fast Walsh–Hadamard transform,
  `h = H s`. The transform is unnormalised and lossless, and each element
  grows by log2 N bits. The result is then quantized to int8. The factor
  `1/√N` and the activation step are part of the quantizer's scale.
* The MAC array then computes `W'' q ≈ W a / (scale)` directly in the
  original domain. The next sine can therefore be applied without an inverse
  transform.

The Hadamard step is optional per layer (`cfg[l].had_en`). With it off, the
same path is a plain uniform quantizer, and the weights must then be stored
untransformed.

Number formats along the path (defaults):

| signal | format |
|---|---|
| coordinate | int8: `floor((2c+1)·128/size) − 128`, so `c − 128` for a 256-pixel axis |
| weight, activation | int8 (two's complement) |
| product, sum, bias, pre-activation `z` | int16, then int32 |
| sine phase | `((z · ph_mul) >>> ph_shift) mod 1024`, 1024 steps per period |
| sine value | int12, `round(2047 · sin(2π·phase/1024))` |
| Hadamard output | int20 (12 + log2 256) |
| quantized activation / pixel | `clamp(floor(x · q_mul / 2^q_shift + ½), −128, 127)` |

`ph_mul`/`ph_shift` hold the SIREN frequency factor ω₀ and the fixed-point
scale of `z`. The `phase` formula shows how: with weights at step `s_w` and
activations at step `s_a`, set `ph_mul / 2^ph_shift ≈ ω₀ · s_w · s_a · 1024 / 2π`.
`q_mul`/`q_shift` give the quantization step of the layer's output. For the
output layer they map the int32 sum straight to the int8 pixel value.

The sine comes from a quarter-wave table of 257 entries,
`T[k] = round(2047 · sin(2πk/1024))`, in `rtl/sine_quarter.hex`. The
other three quadrants are mirror images of it.

## Block diagram and data flow

```
               +-------------+ control +----------------------------------+
               | mem_ctrl    |-------->| linear_wb_ram (769 x 2048 b)     |
               +-------------+         +----------------------------------+
                  |      |                         | one weight row / cycle
                  v      v                         v
 coord_gen -> input_wb_ram ->  input_layer     linear_layer  <- intermediate_ram
  (x, y)      (256 words)     2 MACs + add    256 MACs + tree      (2 banks)
                                   |                |                  ^
                                   +----> sine_quant <+                 |
                                  sine -> FWHT -> 256 quantizers -------+
                                           \-> output quantizer -> result_ram
```

* **coord_gen** steps through a run of pixels in raster order and holds the
  current pixel's int8 (x, y) and raster index.
* **input_wb_ram / input_layer** handle one hidden neuron per cycle:
  `x·wx + y·wy + b`. The input layer uses the same `mac_array` and
  `adder_tree` modules as the linear layer, with two lanes.
* **linear_wb_ram / linear_layer** handle one output neuron per cycle. A full
  weight row (256 × int8) and the activation word (256 × int8) are read in the
  same cycle. The 256 lanes multiply them, and an 8-level pipelined adder tree
  plus a bias stage reduces the products. The same datapath serves hidden
  layers 1..3 and the output layer. Row map: `(l−1)·256 + j` for hidden layer
  l, `768 + c` for output channel c.
* **sine_quant** ("Sine and Quant") collects the 256 sine values of a layer.
  When the last one arrives, it runs the 8-cycle Hadamard transform if
  enabled, then quantizes all 256 values in parallel. It writes them as one
  word into the intermediate RAM. Output-layer values skip the sine and the
  transform and go straight to the result RAM.
* **intermediate_ram** has two vector-wide banks. Layer l reads bank
  (l−1) mod 2 and writes bank l mod 2. A layer therefore never overwrites its
  own input.
* **mem_ctrl** runs the sequence: input layer, wait for its vector, each
  hidden layer, wait, output layer, wait for the result write, next pixel.
  Request valid bits and tags `{layer, neuron, last}` travel with the data
  through the pipelines. The datapath needs no other control.

## Timing

Every layer issues one neuron per cycle, then waits for its pipeline to drain
and for its vector to be written. With `L = log2 N_HID`, the cycles per pixel
are

    T_pix = (N+8) + N_MID·(N+L+7) + (OUT_CH+L+4) + (L+1)·(vectors transformed)

A job of P pixels takes `P·T_pix + 2` cycles from `start` to `done`. At the
defaults, with the Hadamard transform after all four sine layers, this is
273 + 3·280 + 13 = **1126 cycles per pixel**, and 1090 with the transform off.
For comparison, the published FPGA implementation reports a latency of 1143
cycles for its W8A8 design, without saying what the cycle count covers. Latency
pieces: input layer 3 cycles, linear layer `L+2`, sine 1, Hadamard `L+1`,
quantize and write 2.

## Host interface (`dhq_inr_top`)

* `in_we/in_waddr/in_wdata` load the input layer's words `{wx, wy, bias}`.
  `lin_we/lin_waddr/lin_wdata_w/lin_wdata_b` load the weight rows and biases
  of the other layers. Lane k of a row sits at bits `[8k +: 8]`.
* `cfg[l]` holds per-layer scales and the Hadamard enable (`dhq_pkg::layer_cfg_t`).
  Keep them stable while a job runs.
* `start` with `first_pix` and `num_pix` (at least 1) runs a job. `busy` is
  high during the job and `done` pulses once at its end. `q_sat` pulses
  whenever a written vector or pixel contained a clipped value.
* `res_raddr/res_rdata` read the result RAM (address `pixel·OUT_CH + channel`,
  one-cycle latency).

Reset is synchronous and active-low (`rst_n`). Memories are not cleared.

## How this relates to the published design, and what is this design's own choice

Taken from the published architecture:

* the block set and the connections between the blocks (coordinate
  generator, input-layer MAC array and adder tree, a shared sine-and-quantize
  stage, intermediate RAM, a linear layer with 256 parallel MACs and an adder
  tree that loops back to the sine stage, result RAM, central memory control);
* W8A8 arithmetic;
* five SIREN layers with a linear output layer;
* the Hadamard transform and a single uniform quantizer for every layer.

Choices made here where the published description is silent:

* **Hadamard placement.** The transform is applied on the input side only
  (`W·Hn` and `Hn·a`). The method's two-sided weight transform `Hm W Hn`
  would need an inverse transform of every layer's output before the sine.
  The 2-element coordinate vector is not transformed.
* **Parallelism.** One output neuron per cycle in both layers. The 256 lanes
  are used as the width of a single dot product.
* **No layer overlap.** Layers run one after another, and the input layer of
  the next pixel does not overlap the current one. This gives up the
  "prefetching for subsequent layers" that the published design mentions.
* **Formats.** Hidden width 256, bias and accumulator widths, the
  sine-table method, the scale format (multiplier and shift, round half up,
  zero point 0), the memory word layouts, the two-bank intermediate RAM and
  all handshakes.
* **Not built.**
  * The W8A32 mode of the "dynamic quantization" module, which was a
    comparison point.
  * WIRE's wavelet activation: only `sin` is available.
  * Training and the offline weight transform.

Sizes: the 256 × 256 grayscale image (one output channel) is an assumed
default. A colour 768 × 512 image needs `IMG_W=768, IMG_H=512, OUT_CH=3` and
a result RAM of 1.18 MB.

## Files

`rtl/` has one module per file, plus `dhq_pkg.sv` (shared types) and the sine
table. The top is `dhq_inr_top`. `mac_array` and `adder_tree` are shared by
`input_layer` and `linear_layer`. `hadamard_fwht`, `sine_unit` and
`quantizer` sit inside `sine_quant`.

`tb/` has a self-checking testbench `tb_<module>.sv` for every module. Each
one compares against values computed independently: `tb/dhq_ref_pkg.sv`
gives the reference formulas with `$sin`, real arithmetic and the explicit
±1 Hadamard matrix. Each testbench ends by printing
`TB_RESULT checks=N failures=M`. They also check latencies where a latency is
defined.

* `tb_dhq_inr_top` runs the whole design at N_HID = 16, OUT_CH = 3 on a
  4 × 4 image. It runs two jobs, DHQ mode and Hadamard bypass, and compares
  every output value, the clip count and the job cycle count with a bit-exact
  model. It also counts that every mechanism occurred: transform, bypass, both
  banks, clipping, output writes, a row change.
* `tb_dhq_inr_top_full` runs the same test at the default sizes for five
  pixels, including a row change. It takes about 15 s.
* `tb_siren_cameraman_rows` renders the first four rows (1024 pixels,
  1.15 M cycles) of a 256 × 256 image at the default sizes and checks every
  pixel. The weights are random because no trained network comes with the
  design. It takes about 20 s. A whole image would take 73.8 M cycles.

To simulate, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/dhq_pkg.sv tb/dhq_ref_pkg.sv \
    tb/tb_dhq_inr_top.sv --top-module tb_dhq_inr_top -Mdir obj && obj/Vtb_dhq_inr_top
```

Run it from the repository root, because `sine_unit` reads
`rtl/sine_quarter.hex` by that relative path. When changing `PH_BITS` or
`SIN_W`, regenerate the table with the formula above.
