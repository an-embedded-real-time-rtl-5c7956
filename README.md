# Streaming CNN accelerators for license plate recognition

This RTL is the programmable-logic half of an embedded license plate reader.
A camera frame is searched for plates, and each plate found is read as a
string of up to eight characters. Both steps are small quantised
convolutional networks, and each network is turned into its own streaming
hardware pipeline:

* **Detector (`lpd_accel`).** It takes a 576 x 576 RGB frame and returns an
  18 x 18 grid. Each grid cell has 18 sigmoid outputs: 3 anchor boxes, each
  with x, y, w, h, class and confidence.
* **Recogniser (`lpcr_accel`).** It takes a 64 x 128 grey crop of one plate
  and returns 8 characters, each one of 0-9, A-Z or space, with a flag that
  says whether the character passed a confidence threshold.

Everything around the networks runs as software on the host processor:
resizing the camera frame, decoding the boxes, non-maximum suppression,
cropping the plates and low-light contrast enhancement. The two accelerators
therefore share no signals. `lpr_top` places them side by side. Each one has
a ready/valid input stream, a ready/valid output stream and a weight load
port, which is where a DMA engine would attach.

## Dataflow: one hardware stage per layer

Neither network is run one layer at a time. Every convolution layer, pool and
output stage is its own block, and neighbouring blocks are joined by
ready/valid streams. Each block works on its own part of the image at the
same time as all the others, like a FINN-style dataflow accelerator. A stage
holds only as much of the image as its operation needs:

* a 3x3 convolution holds three rows;
* a 2x2 pool holds half a row;
* a 1x1 convolution holds a single pixel.

No feature map ever goes to external memory.

Each layer is split into two parts (`conv_layer`):

1. **`sliding_window`.** A window generator that turns the raster pixel
   stream into 3x3 neighbourhoods.
2. **`mvau`.** A folded matrix-vector unit that multiplies each
   neighbourhood by the layer's weight matrix and requantises the result.

### Detector layers

| layer | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 |
|---|---|---|---|---|---|---|---|---|---|---|
| kernel | 3x3 | 3x3 | 3x3 | 3x3 | 3x3 | 3x3 | 3x3 | 1x1 | 3x3 | 3x3 |
| map in | 576 | 288 | 144 | 72 | 36 | 18 | 18 | 18 | 18 | 18 |
| out channels | 8 | 8 | 16 | 32 | 56 | 104 | 208 | 56 | 104 | 18 |
| 2x2 pool after | yes | yes | yes | yes | yes | | | | | |
| PE x SIMD | 8x9 | 4x8 | 2x8 | 2x8 | 2x8 | 2x8 | 8x8 | 2x8 | 2x8 | 2x8 |

* All weights and activations are 4 bits.
* Layer 9 is linear. Its accumulators go to the quantised sigmoid.
* In total the detector has 350,696 weights and needs 294 M
  multiply-accumulates per frame.

### Recogniser layers

The input is max pooled 2x2 first, so the first convolution works on a
32 x 64 map.

| layer | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 |
|---|---|---|---|---|---|---|---|---|---|---|---|
| kernel | 3x3 | 3x3 | 3x3 | 3x3 | 3x3 | 3x3 | 1x1 | 3x3 | 1x1 | 1x1 | 3x3 |
| map | 32x64 | 32x64 | 16x32 | 16x32 | 8x16 | 8x16 | 8x16 | 4x8 | 4x8 | 4x8 | 4x8 |
| out channels | 16 | 32 | 64 | 128 | 128 | 128 | 256 | 256 | 512 | 1024 | 296 |
| weight bits | 4 | 4 | 4 | 2 | 2 | 2 | 2 | 2 | 2 | 2 | 1 |
| 2x2 pool after | | yes | | yes | | | yes | | | | |
| PE x SIMD | 1x9 | 2x16 | 2x16 | 4x32 | 2x32 | 2x32 | 1x16 | 2x32 | 1x16 | 2x32 | 4x64 |

* A global max pool over the final 4 x 8 map reduces the 296 channels to
  296 scores.
* `char_decoder` reads the scores as 8 character positions, with 37 classes
  at each position.
* In total the recogniser has 4.40 M weights and needs 226 M
  multiply-accumulates per plate.

## Folding and throughput

`mvau` processes one input vector of KDIM = K·K·Cin activations in
NF x SF clock cycles, where:

* NF = Cout / PE;
* SF = KDIM / SIMD.

In every cycle, PE output channels each form a SIMD-wide dot product and add
it to their accumulators. The next vector is taken in the same cycle as the
last fold step of the current one, so a busy layer spends exactly NF x SF
cycles on each pixel.

A whole pipeline runs at the rate of its slowest layer, which is
pixels x NF x SF cycles for each image:

| pipeline | slowest layers | cycles per image | at 150 MHz |
|---|---|---|---|
| detector | layers 1-3 | 1,492,992 | 9.95 ms |
| recogniser | layer 10 | 340,992 | 2.27 ms |

PE and SIMD are set per layer in `lpr_pkg`, and nowhere else. They must
divide Cout and KDIM. Changing them changes only the speed and the amount of
parallel arithmetic. The results stay the same.

The weight memory of a layer has NF x SF words, each PE x SIMD x WBITS bits
wide:

* Word `nf*SF + sf` holds the weights of output channels
  `nf*PE .. nf*PE+PE-1` against inputs `sf*SIMD .. sf*SIMD+SIMD-1`.
* Bits `[(p*SIMD+s)*WBITS +: WBITS]` hold the weight of channel `nf*PE+p`
  for input element `sf*SIMD+s`.
* Inputs are numbered `(ky*3+kx)*Cin + ch`, in the order that
  `sliding_window` emits them.

To load a memory, raise `wr_en` with `wr_layer` and `wr_addr` for one cycle
per word. Weights can be reloaded between images.

The weight encodings are:

* Weights of 2 and 4 bits are two's complement.
* A 1-bit weight is bipolar: 0 means -1 and 1 means +1.

## The window generator

`sliding_window` is the hardest part of the design to get right.

**Storage.** It stores the last three image rows in a circular line buffer.
A raster counter `in_idx` counts pixels written, and `out_idx` counts windows
emitted.

**Emitting a window.** The window centred at pixel (r, c) needs pixel
(min(r+1, H-1), min(c+1, W-1)). It can be emitted once that pixel has
arrived. Taps outside the image are zero, so padding is "same" and stride
is 1.

**Overwriting.** A new pixel overwrites the slot of the pixel three rows
earlier. The oldest window that still needs that pixel is centred one row
below it, one column to the left. The input is therefore held back until
that window has been emitted.

The exact rule appears as the `in_ready` expression in `sliding_window.sv`.
It has two exceptions:

* the first three rows always enter;
* a pixel at the end of a row needs one window less.

Simpler rules either deadlock on narrow maps (W = 2 at the 4 x 8 recogniser
stage) or corrupt data. The unit test runs three shapes, down to W = 1,
under random stalls on both sides.

## Requantisation

**After a ReLU layer.** Each accumulator is shifted right arithmetically by
`SHIFT`, and then clipped to 0..15. This is a ReLU followed by a uniform
4-bit quantiser whose scale is a power of two.

**Choosing the shift.** A trained network would have a learned scale for
each layer. Those scales are not available, so the shift is derived from
the fan-in by `lpr_pkg::relu_shift`. It keeps random-weight networks in range
through all layers. For a trained model, replace it with the model's own
shifts.

**Detector output.** The detector's last layer skips the ReLU. Its signed
accumulator is turned into an 8-bit code by `acc >>> SIG_SHIFT`, clamped to
-128..127, which covers the range [-3.5, 3.5) in steps of 3.5/128.
`quant_sigmoid` then looks the code up in a 256-entry table of
`round(255 / (1 + exp(-code*3.5/128)))`. The table is computed when the
design is elaborated. Its outputs run from 7 at the low end to 247 at the
high end.

## Character decision

The 296 pooled scores are read as position-major: channel `k*37 + j` is
class `j` at position `k`. Classes 0-9 are the digits, 10-35 are A-Z, and
36 is space, which pads short plates.

`char_decoder` handles one position per clock, so a plate takes 8 + 1
cycles. At each position it does three things:

1. It picks the highest score, taking the lowest class on a tie.
2. It computes the softmax probability of the winner without dividing:
   S = Σ_j round(4096·exp(-SCALE·(x_max - x_j))). The probability is then
   4096/S. The exponentials come from a 16-entry table, and the default
   SCALE is 0.5.
3. It keeps the character if 4096/S ≥ `conf_thr`/256, checked as
   `S*conf_thr <= 2^20`. Otherwise it outputs a space.

The outputs are:

* `chars`: the ASCII string after substitution;
* `cls`: the raw class indices;
* `kept`: one flag per position.

## Where this differs from the published system

* **Pruning.** The recogniser is the network before pruning. The published
  system removes unused filters after training, which cuts the recogniser
  from about 4.25 M to 1.02 M parameters. Which filters go depends on the
  trained model, so the layer widths here are the unpruned ones.
  * Weight storage is about 940 KB, instead of the 268 KB reported for the
    pruned system.
  * Narrower layers only need smaller Cout values in `lpr_pkg`.
* **Operation count.** The layer sizes used here give 294 M
  multiply-accumulates for the detector. The published count is 0.363 G
  operations, and the source of the difference is not known.
* **Requantisation.** Requantisation scales are powers of two. The sigmoid's
  input scale and the decoder's softmax scale are fixed parameters, not
  learned values.
* **Convolution bias.** Convolutions have no bias term.
* **Clock and timing.** No clock frequency is given for the original. The
  folding was chosen so that the detector's frame time at 150 MHz matches
  the reported 9.9 ms. At that clock the recogniser is faster than the
  reported 4.0 ms per plate.
* **Software steps.** Resizing, box decoding, NMS, cropping and contrast
  enhancement are software on the host and are not included.

## Files

| file | contents |
|---|---|
| `rtl/lpr_pkg.sv` | bit widths, the layer tables, folding, shift rule and small helpers |
| `rtl/sliding_window.sv` | 3x3 window generator |
| `rtl/mvau.sv` | folded matrix-vector unit with weight memory and activation |
| `rtl/conv_layer.sv` | window generator + MVAU (or MVAU alone for 1x1) |
| `rtl/maxpool2x2.sv`, `rtl/global_maxpool.sv` | pooling |
| `rtl/quant_sigmoid.sv` | 8-bit sigmoid table |
| `rtl/char_decoder.sv` | argmax, softmax test and space substitution |
| `rtl/lpd_accel.sv`, `rtl/lpcr_accel.sv` | the two pipelines |
| `rtl/lpr_top.sv` | top level |
| `tb/lpr_ref_pkg.sv` | plain loop-based model of both networks, used as the reference |
| `tb/tb_*.sv` | self-checking testbenches |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends. For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/lpr_pkg.sv tb/lpr_ref_pkg.sv tb/tb_lpr_top.sv --top-module tb_lpr_top -o sim
./obj_dir/sim
```

The testbenches are:

* **Unit testbenches.** They compare every output word with `lpr_ref_pkg`.
  They also measure cycle counts:
  * `tb_mvau` and `tb_conv_layer` check NF x SF cycles per vector;
  * `tb_lpd_accel` checks the frame time against the slowest-layer bound.
* **`tb_lpr_top`.** It runs both pipelines at a reduced size (64 x 64
  frames, 16 x 32 plates) with random stalls on every stream. It covers
  back-to-back frames, a weight reload between frames, sigmoid saturation,
  and both kept and replaced characters, and it counts each of these.
* **`tb_lpr_top_full`.** The same test with the top level at its full size:
  three 576 x 576 frames and three 64 x 128 plates, about 6.5 M cycles.
  It compiles and runs in about 3 minutes, including the reference model,
  which runs in the simulator.

Random weights stand in for a trained model, so these tests check that the
arithmetic is exact, not that plates are recognised. With random weights the
scores at the end of the deep recogniser are often flat, and many positions
decode to the lowest class. Its testbenches, which see only the decoded
characters, are therefore less sensitive than the detector's, which compare
every output value. To use real weights,
pack them in the memory layout above and supply the model's requantisation
shifts.
