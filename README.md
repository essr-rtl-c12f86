# ESSR: edge-selective x4 super-resolution accelerator in SystemVerilog

This accelerator up-scales a low-resolution (LR) video frame by 4 in each direction. A 1920x1080 LR input becomes a 7680x4320 (8K) output. The main idea is that most of a frame is flat, and flat regions need no neural network.

The frame is cut into small overlapping patches. For each patch the hardware first measures how much edge content it has. That measurement, the *edge score*, picks one of three up-scalers:

| edge score            | subnet   | what runs                                          |
|-----------------------|----------|----------------------------------------------------|
| `< threshold1` (8)    | bilinear | fixed 3x3 interpolation                            |
| `< threshold2` (40)   | C27      | 27-channel network                                 |
| otherwise             | C54      | 54-channel network, the same weights at full width |

A controller moves the two thresholds from frame to frame so that the expensive C54 network stays within a compute budget. All three subnets run on one configurable processing-element (PE) array. That array executes several layers in one pass without writing intermediate results back to memory.

The RTL follows a published accelerator architecture, "ESSR: An 8K@30FPS Super-Resolution Accelerator With Edge Selective Network". It is a re-implementation from that description, not the authors' code. Where the description leaves a detail open, the choice made here is stated below and in the opening comment of each file.

## Data path at a glance

```
DRAM ──► input buffer ──────────────────────────► PE array (GLNPU) ──► boundary ──► DRAM
   │        (RGB patch)                              ▲   │   ▲           processing
   │                                                 │   ▼   │           (overlap-average,
   └──► edge score ──► model switch ──► sequencer ───┘  feature SRAMs    pixel shuffle)
                        (thresholds,     (passes,        x3: S, X, Y
                         C54 budget)      weight preload)
DRAM ──► weight SRAM (whole model, 2020 words x 27 values x 10 bit = 66.6 KB)
```

Top module: `rtl/essr_top.sv`. It handles one patch at a time, in four steps:

1. Receive the patch.
2. Score it and choose a subnet.
3. Run all passes of the chosen subnet.
4. Emit the result through boundary processing.

`in_ready` is high while the top can accept a new patch.

## Patches and the boundary between them

- **Patch size.** Patches are `P`x`P` LR pixels (32).
- **Stride.** Patches are taken with a stride of `P-OVL` = 30, so neighbours share `OVL` = 2 LR columns or rows. After x4 up-scaling that overlap is 8 HR pixels.
- **Count.** A 1920x1080 frame needs 64x36 = 2304 patches.
- **Padding.** Each patch is processed on its own, with zero padding for the 3x3 convolutions. The overlap hides the wrong values near patch edges.
- **Output layout.** The 48 output channels of a patch position are `colour*16 + 4*i + j`, which is HR pixel `(4y+i, 4x+j)` of that colour. This is the x4 pixel shuffle.
- **Averaging.** `boundary_proc` clamps each value to 8 bits, then averages the overlaps as `(a+b+1)>>1`. It does this separably:
  - **Vertical seams.** A *right strip* buffer holds the last `OVL` columns of the previous patch in the same patch row. When the next patch arrives, its first `OVL` columns are averaged with them.
  - **Horizontal seams.** A *bottom strip* buffer holds the last `OVL` rows of the whole patch row above, across the full frame width. The first `OVL` rows of the next patch row are averaged with it.
  - **Corners.** A position covered by four patches is averaged first left with right, then top with bottom.
- **Emission.** A position leaves on `out_*` exactly once, when its last covering patch has been processed. It leaves with its LR frame coordinates, as one 4x4x3 HR block per cycle.
- **Strip size.** The strips need 187 KB at the default sizes. The published boundary SRAM is 114 KB; this implementation does not reproduce that figure.

## Edge score and model switching

**Edge score (`edge_score`).** The unit stores the patch's luma, `Y = (77R + 150G + 29B + 128) >> 8`. It then applies the Laplacian `[0 1 0; 1 -4 1; 0 1 0]`, with the border pixels replicated. The absolute response is clamped to 255, and the mean over the patch is the score. The unit takes one pixel per cycle in and computes one Laplacian per cycle. The score is ready `P*P` cycles after the last pixel.

**Model switch (`model_switch`).** It counts patches to find frame boundaries (2304 patches) and second boundaries (30 frames). Its rules:

- **Budget cap.** If more than 25 500 C54 patches have been issued in the current second, the rest of that second runs C27, whatever its score.
- **Raise thresholds.** Otherwise, at the end of a frame with more than 1000 C54 patches, threshold1 rises by 1 and threshold2 by 5.
- **Lower thresholds.** With fewer than 700 C54 patches in the frame, both fall by the same steps.

Choices made here:

- A score equal to a threshold takes the larger subnet.
- The thresholds saturate at 0 and 255.
- Thresholds do not change at the end of a capped frame.

## The networks

All values are signed 10-bit fixed point, saturated to -512..511. Activations are integers at pixel scale. Weights carry 6 fraction bits. Every convolution has a bias.

**C54**, 17 passes:

- BSConv on the RGB input: a 1x1 convolution from 3 to 54 channels, then a depth-wise 3x3.
- Five fusion blocks, each of three passes:
  - BSConv, then ReLU.
  - BSConv, then ReLU.
  - Add the block input (shortcut), then a 1x1 convolution, then ReLU.
- DSConv: a depth-wise 3x3, then a 1x1 convolution from 54 to 48 channels, which feeds the pixel shuffle.

**C27** uses the same structure at 27 channels, with the upper-left 27x27 parts of the C54 weights. Each fusion block runs in *one* pass (see below), so C27 takes 7 passes.

**Bilinear** is a single pass. It uses fixed 3x3 weights in 64ths and replicates pixels at the patch border. HR sub-pixel `i` of an LR pixel sits at LR offset `(2i-3)/8`.

## The PE array and its mappings (`glnpu_datapath`)

The array has these physical units:

- **1x1 groups A, B, C, D.** Each group is three 27x9 PE blocks. One group multiplies 27 input channels by a 27x27 weight matrix every cycle, so the four groups together do one 54x54 1x1 layer per pixel.
- **Two 3x3 blocks, B and C.** Each has 27 columns of 9 PEs and computes 27 depth-wise 3x3 convolutions. A line buffer in front of each forms the windows.
- **Three adder trees.** They add the partial sums of one or two groups, then add the bias, round, saturate and optionally apply ReLU.
- **Two shortcut adders.**

That is 14 blocks of 243 PEs, 3402 PEs in total.

The `mode` input rewires these units:

| mode      | chain                                                                                                               |
|-----------|---------------------------------------------------------------------------------------------------------------------|
| `M_BS54`  | ch 0..26 → A and D, ch 27..53 → B and C; tree 1 = A+B → 3x3-B; tree 2 = C+D → 3x3-C                                 |
| `M_PW54`  | shortcut adders → A..D → tree 1 and tree 2 (the third pass of a C54 block)                                          |
| `M_DS54`  | 3x3-B and 3x3-C → A..D → 48 outputs                                                                                 |
| `M_SFB27` | 1x1-B → tree 1 → 3x3-B + ReLU → 1x1-C → tree 2 → 3x3-C + ReLU → shortcut adder → 1x1-A → tree 3 + ReLU             |
| `M_DS27`  | 3x3-B → 1x1-B (outputs 0..26) and 1x1-C (outputs 27..47)                                                            |
| `M_BIL`   | the three colours are fanned out to the 48 lanes of 3x3-B and 3x3-C                                                 |

`M_SFB27` is the main reason the array is built this way. It lets a whole C27 fusion block (five convolutions, a shortcut and three ReLUs) stream through the array once, with no intermediate feature written back.

**Timing.** Every unit is a fixed-latency pipeline. A *position token* (valid, row, column) travels beside the data, delayed by the same number of cycles, so no unit waits for another:

- The source is scanned over `(P + k)` rows by `(P + 2)` columns, where `k` is the number of 3x3 stages in the pass (1 or 2). The extra positions flush the line buffers.
- Each line buffer moves the token back to the centre of its window. Window taps that fall outside the patch are forced to zero by position, so stale contents of the line buffer (for example right after reset) never leak into a result.
- Positions outside the patch are replaced by zero on entry. This gives the zero padding.
- The result is written to the destination feature SRAM at the address its token gives.

## Sequencer, weights and feature buffers (`glnpu_ctrl`)

The control in `essr_pkg::get_pass` is a table of passes per subnet. For each pass it gives:

- the mode;
- the source, destination and shortcut buffer roles;
- the ReLU flags;
- up to ten weight-load commands.

Each load command copies a run of words into numbered *load targets*:

| targets  | what they hold                           |
|----------|------------------------------------------|
| 0..107   | rows of the four 1x1 groups              |
| 108..116 | taps of 3x3-B                            |
| 117..125 | taps of 3x3-C                            |
| 126..128 | biases of the three adder trees          |
| 129..130 | biases of the two 3x3 blocks             |

The source of a command is a run of weight-SRAM words, the built-in bilinear weights, or zeros. C27 reuses parts of the C54 layers by loading the upper-left block of a layer into whichever group the SFB chain needs.

Weight-SRAM layout, per C54 layer, in words of 27 values:

| layer                     | 1x1 quadrants | 3x3 taps | biases                          | total |
|---------------------------|---------------|----------|---------------------------------|-------|
| BSConv / DSConv           | A, B, C, D: 4 x 27 | 2 x 9 | 2 for the 1x1, 2 for the 3x3 | 130 |
| shortcut + 1x1            | A, B, C, D: 4 x 27 | none  | 2                            | 110 |
| first layer (3 inputs)    | 2 x 9         | 2 x 9    | 4                               | 40    |

The quadrants are: A = inputs 0..26 to outputs 0..26, B = inputs 27..53 to outputs 0..26, C = inputs 27..53 to outputs 27..53, D = inputs 0..26 to outputs 27..53.

**Feature buffers.** Three feature SRAMs (1024 x 540 bit each) play the roles S (block input or shortcut), X and Y. After a pass with a shortcut, the roles of S and the destination swap, so the block output becomes the next shortcut without copying. The first pass reads the input buffer instead.

## Where this implementation departs from the published design

- **One patch at a time.**
  - Input, scoring, network and output do not overlap.
  - Weights are loaded before each pass instead of during the previous one.
  - As a result a C54 patch takes about 24 000 cycles, a C27 patch about 10 000 and a bilinear patch about 3 000, at `P` = 32.
  - Real-time 8K at 30 frames/s and 800 MHz allows about 11 600 cycles per patch on average. This implementation does not reach that.
- **Boundary storage.** The strip buffers are 187 KB against the published 114 KB.
- **Fixed-point format.** The rounding and bias scaling, luma weights, Laplacian kernel and bilinear weights are this design's choices.
- **No trained weights.** The tests use random weights, so no image-quality numbers can be reproduced.
- **Scale.** Only x4 is built. x2 would need a 12-channel output layer.
- **DRAM.** There is no DRAM controller. The traffic appears as top-level ports: weight writes, the patch stream and output blocks.

## Files

- `rtl/essr_pkg.sv`: types, constants, the pass table, requantisation.
- PE array, bottom up:
  - `rtl/pe.sv`
  - `rtl/pe1x1_block.sv`
  - `rtl/pe3x3_block.sv`
  - `rtl/pw_group.sv`
  - `rtl/adder_tree.sv`
  - `rtl/adder_tree_unit.sv`
  - `rtl/sc_adder.sv`
  - `rtl/line_buffer.sv`
  - `rtl/tok_delay.sv`
  - `rtl/glnpu_datapath.sv`
- Memories: `rtl/feature_sram.sv`, `rtl/weight_sram.sv`, `rtl/input_buffer.sv`.
- Control: `rtl/edge_score.sv`, `rtl/model_switch.sv`, `rtl/glnpu_ctrl.sv`.
- Output: `rtl/boundary_proc.sv`.
- Top: `rtl/essr_top.sv`.
- Testbenches, `tb/`: one per unit (`tb_<module>.sv`) plus two end-to-end tests.
  - **`tb_essr_top`** runs three 14x14 frames of 8x8 patches. Its parameters are chosen so that every mechanism happens: all three subnets, the C54 cap, raising and lowering of the thresholds, and both seam averages. It checks every output bit against a reference model written in the testbench.
  - **`tb_essr_full`** runs three patches (one per subnet) with every parameter at its default.

## How far it is verified

Every unit testbench compares against values it computes itself: products, window contents, averages, edge scores, threshold sequences and pass or load counts. Each one is also known to fail when the unit is broken in a typical way.

The end-to-end test `tb_essr_top` holds a plain loop-nest model of all three subnets. That model uses the weight layout described above and the same rounding. It also models the edge score, the switching rules and the overlap averaging. All 588 output blocks of its three frames match bit for bit.

Untested:

- Random weights exercise the arithmetic but say nothing about image quality.
- The tests do not cover 8-bit score overflow corner cases or frames whose size is not a whole number of strides.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops. For example:

```
verilator --binary --timing -Irtl -y rtl rtl/essr_pkg.sv tb/tb_essr_top.sv --top-module tb_essr_top
./obj_dir/Vtb_essr_top
```

The top-level testbenches take several minutes to compile, because the PE array has 3402 multipliers.
