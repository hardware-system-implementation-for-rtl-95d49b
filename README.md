# HOG + SVM human detector in SystemVerilog

This design decides whether a 130 x 66-pixel grayscale image window shows a
person. It extracts a Histogram of Oriented Gradients (HOG) descriptor from
the window and applies a linear Support Vector Machine (SVM). The descriptor
has 3780 features. The SVM is a hyperplane `D = W.X + b` trained offline, and
the answer is 1 (person) when `D > 0`. The hardware does the extraction and
the classification. Training happens in software, and its result (`W`, `b`)
is loaded into a memory before the detector runs.

The RTL follows the architecture of the paper "Hardware System
Implementation for Human Detection using HOG and SVM Algorithm" (V.-C.
Nguyen, H.-T.-D. Le, H.-T. Huynh). It uses the paper's block names, its
geometry, its 15-step CORDIC and its cycle budgets (108 clocks per cell, 47
clocks per block normalization). The paper leaves out much of the detail:
number formats inside the CORDIC, bin layout, feature order, memory ports and
the Newton-Raphson formulation. Those parts are this design's own choices and
are marked as such below and in each file's header.

## The descriptor

* The window is 130 rows by 66 columns. Leaving out a one-pixel border gives
  128 x 64 pixels, which split into **16 x 8 cells** of 8 x 8 pixels.
* Each pixel gets a gradient, `fx = f(r, c+1) - f(r, c-1)` and
  `fy = f(r+1, c) - f(r-1, c)`. These are integers in -255..255. The border
  pixels exist only to serve as neighbours.
* Each gradient has a magnitude and an angle `theta = arctan(fx / fy)`. The
  orientation is unsigned: angles are folded into 0..180 degrees. The pixel
  adds its magnitude to one of **9 bins of 20 degrees**, with no
  interpolation between bins. Bin k covers [20k, 20k+20) degrees.
* A **block** is 2 x 2 neighbouring cells (36 values). Blocks overlap by one
  cell, giving 15 x 7 = 105 blocks. Each block is L2-normalized:
  `v_i / sqrt(sum v^2 + eps^2)`, with `eps = 0.1`.
* Feature `36*b + 9*q + k` is bin k of cell q of block b. Blocks are counted
  row by row, `b = 7*by + bx`. Within a block, cells are taken top-left,
  top-right, bottom-left, bottom-right. **The trained weights must use this
  order.** The paper does not give one.

## Dataflow and the cycle budget

```
iEn -> addr_decoder_mem -> image_mem -> histogram_1cell_prenorm -> buffer_hog_prenorm
                                                                         |
       svm_classify <- trained_data_mem       block_normalization <------+
            ^                ^                (block_normalization_core)
            |                |                         |
            +-- buffer_hog <-+---- addr_for_svm        v
                  ^                                 buffer_hog
                  +-------------------------------------+
```

`human_detection_system` is the top. It runs three phases in sequence, and
each phase is started by the previous phase's one-clock `done`:

| phase | what happens | clocks |
|---|---|---|
| extraction | a rising edge of `iEn` starts the address decoder; one cell every 108 clocks | 128 x 108 = 13824 |
| normalization | 105 blocks, 47 clocks to the scale factor plus 36 output clocks plus 1 | 105 x 84 = 8820 |
| classification | bias, then 3780 features, one every 4 clocks | 3781 x 4 + 2 = 15126 |

One detection takes **37770 clocks, 0.755 ms at 50 MHz**. The full-size
testbench measures this number. The paper reports 0.757 ms. The paper gives
0.411 ms for extraction alone; here extraction plus normalization take
0.453 ms. The difference comes from streaming the 36 normalized values out
after each block's 47-clock normalization, which the paper does not count.

**Why 108 clocks per cell.** For each cell, the decoder reads the 10 x 10
window made of the cell and its border, one pixel per clock. That takes 100
clocks, and the decoder then idles to complete the 108-clock period the paper
states. The histogram unit finishes a cell 103 clocks after the cell's first
pixel. That leaves room before the next cell, although the unit would also
accept the next cell back to back. Border pixels are read again for
neighbouring cells. The paper does not say how it spends its 108 clocks, so
this is an interpretation.

## The CORDIC (hardest part)

`cordic.sv` computes magnitude and angle without multipliers. It is the
paper's flowchart (Fig. 7 of the paper), unrolled into the 15-stage
shift-and-add array of its block diagram (Fig. 8). Stage n does the
following:

* Y > 0: `X += Y>>n`, `Y -= X>>n`, `Z += atan_table[n]`.
* Y < 0: the same with the signs swapped.
* Y = 0: the loop is over, and the stage passes its values on unchanged.

The 15 angle constants are the printed values 45, 26.565, 14.036, ...,
0.004 degrees, stored as `round(deg * 2^16)`. The result is
`Angle = Z` and `Magnitude = X / K` with K = 1.6467. There is one exception:
if Y is 0 on entry, no iteration runs and `Magnitude = X`.

The pieces of this design that need care:

* **Vectoring, not rotation.** The paper's block diagram labels the
  add/subtract control `sgn(z)`, which is rotation mode. The flowchart and
  the text (arctan and magnitude) require vectoring mode, which steers on the
  sign of Y. The RTL follows the flowchart.
* **Operand order.** The angle is `arctan(fx/fy)`, so `X = fy` and `Y = fx`.
  Vectoring converges only for X >= 0. The histogram unit therefore negates
  both inputs when `fy < 0`. This rotates the angle by 180 degrees and leaves
  the unsigned bin unchanged.
* **Early exit with a fixed K.** As printed, the flowchart stops as soon as
  Y becomes exactly 0. It still divides by the gain of all 15 iterations,
  K = 1.6467. A pixel that stops after L < 15 iterations therefore gets
  `|g| * G(L) / K`, where `G(L) = prod sqrt(1 + 2^-2i)` over the iterations
  run. The error is -14% for L = 1 and negligible from about L = 6 on. With
  12 fraction bits, about half the pixels of a typical image exit early. The
  RTL keeps this behaviour, and the testbenches model it exactly. To get
  textbook CORDIC magnitudes, remove the `y == 0` bypass in the stage loop.
* **Fixed point.** X and Y use 24-bit signed values with 12 fraction bits.
  The angle is signed degrees with 16 fraction bits. The magnitude leaves
  the CORDIC as fixed point and is converted exactly to single precision
  (`fix2fp`).

The array is purely combinational: 15 adder stages of 24 bits. Nothing in
the paper places registers inside it. If timing closure needs more
registers, the histogram pipeline has room to add some.

## Histogram unit

`histogram_1cell_prenorm` keeps the 10 x 10 window in registers. The
gradient of interior pixel (r, c) is formed in the clock when pixel
(r+1, c) arrives, so the unit needs no second pass over the pixels. The
pipeline has four stages:

1. gradient;
2. fold and CORDIC;
3. angle to bin, and magnitude to fp32;
4. fp32 add into the bin register.

The cell's first vote loads its bin and clears the other bins. `hist_valid`
brings out all 9 bins together with the cell number, and
`buffer_hog_prenorm` stores them as one 288-bit word.

## Normalization

`block_normalization_core` computes `1/sqrt(s)` by Newton-Raphson,
`y <- y * (1.5 - 0.5*s*y*y)`. The seed is the classic exponent-halving
constant `0x5F3759DF`, and four steps reach full single precision. The
paper says its core approximates the square root by Newton-Raphson. Working
on the reciprocal instead removes the divider, and the 36 divisions become
multiplications. The 47-clock schedule is laid out so that the scale factor
is ready at clock 47, the figure the paper gives:

* 4 clocks: load;
* 36 clocks: multiply-add;
* 1 clock: add eps^2;
* 1 clock: seed;
* 4 clocks: Newton-Raphson steps.

`block_normalization` walks the blocks and reads the four cells of each
block on consecutive clocks. It writes the outputs to `buffer_hog` at
`36*b + i`.

## Arithmetic

All values after the CORDIC are IEEE 754 single precision, as in the paper.
`fp_add` and `fp_mul` are combinational and round to nearest, ties to even.
Subnormals are flushed to zero and overflow gives infinity. NaN and infinity
inputs are not handled, and the detector's datapath cannot produce them.

## SVM

`addr_for_svm` issues a beat every 4 clocks. The first beat reads the bias
(trained-data address 3780), and the next beats read features 0..3779
together with their weights. `svm_classify` loads the sum with `b`,
registers each product and adds it on the next clock. Two clocks after the
last beat it sets `result = (D > 0)` and pulses `done`. D = 0 counts as no
person.

## Using the top

Ports of `human_detection_system` (defaults `IMG_H = 130`, `IMG_W = 66`):

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `iEn` | in | a rising edge starts a detection |
| `img_we`, `img_waddr[13:0]`, `img_wdata[7:0]` | in | load pixel (row, col) at `row*66 + col` |
| `tr_we`, `tr_waddr[11:0]`, `tr_wdata[31:0]` | in | load `W[i]` at i, `b` at 3780 (fp32) |
| `oReady` | out | idle |
| `oDone` | out | one-clock pulse when the answer is ready |
| `oResult` | out | 1 = person; valid from `oDone` until the next run |
| `oSum[31:0]` | out | D = W.X + b (fp32) |

Load the image and the hyperplane, then raise `iEn`. Keep the memories
unwritten while a run is in progress. To run the same image against a new
bias, rewrite only address 3780 and start again.

## Files

* `rtl/hd_pkg.sv`: shared types (`fp32_t`, `hist_t`) and constants,
  including the angle table.
* `rtl/*.sv`: one module per file, named as in the dataflow above, plus
  `fp_add`, `fp_mul` and `fix2fp`.
* `tb/tb_<module>.sv`: a self-checking testbench per module. Each prints
  `TB_RESULT checks=N failures=M`.
* `tb/fp_ref_pkg.sv`: conversions between fp32 bits and `real`.
* `tb/cordic_ref_pkg.sv`: the reference model of one pixel's vote.

`tb_human_detection_system` runs the whole detector at full size. It does
the following:

* It generates an image and nudges pixels until no gradient angle lies
  within 0.05 degree of a bin edge, so that the CORDIC's angle error cannot
  move a vote.
* It computes all 3780 features and D in double precision and checks every
  feature in the buffer (0.5%) and D.
* It checks the clock count, and checks that a second run with only the bias
  changed flips the answer.
* It counts CORDIC exits on entry and mid-loop, X < 0 folds, both answers
  and the use of every bin. A count of zero is a failure.

Simulate it with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/hd_pkg.sv tb/fp_ref_pkg.sv tb/cordic_ref_pkg.sv \
  tb/tb_human_detection_system.sv --top tb_human_detection_system
obj_dir/Vtb_human_detection_system
```

The run takes about 1.5 minutes of simulation (two detections). The unit
testbenches build the same way: name the testbench file and its top, and
`-y` finds the modules it uses.

## How far to trust it

* Every block has a testbench against an independent reference.
* Each testbench was also run against a deliberately broken copy of its
  module and detected the fault.
* At full size, all features match a double-precision model within 0.5%,
  and D matches within 0.5% of `sum |w_i x_i|`. The clock count is exact.
* Not checked: accuracy on real images. The paper's trained hyperplane and
  test images (INRIA/MIT) are not available, so its 84.35% cannot be
  reproduced here. Any hyperplane trained with the descriptor order above
  can be loaded.
* Gate-level timing at 50 MHz has not been analysed. The long combinational
  paths are the CORDIC array and the Newton-Raphson step, which chains three
  multipliers and a subtractor in one clock.

## Departures from the paper and choices it leaves open

* The CORDIC steers on the sign of Y (the flowchart) rather than `sgn(z)`
  (the block diagram). It runs in fixed point, although the paper says its
  arithmetic is floating point.
* Newton-Raphson computes `1/sqrt` rather than `sqrt`, and `eps = 0.1`.
* The order of blocks and features, and the bin layout with no
  interpolation, are this design's choices.
* Normalized outputs take 36 clocks per block beyond the paper's 47, so
  extraction takes 0.453 ms instead of 0.411 ms.
* Memory ports, the host load ports, starting on the rising edge of `iEn`,
  and SVM pacing at 4 clocks per feature are this design's choices.
* The paper's block diagram calls the normalized-feature memory
  `MEM_HOG_PRENORM`, while its text calls it `BUFFER_HOG`. Here it is
  `buffer_hog`.
* The paper's simulation waveform of the SVM shows extra clock signals
  (`clk1`, `clk_sum`) next to `clk`. This design runs everything from one
  clock and paces the SVM with a 4-clock beat instead.
* Training, RGB-to-gray conversion and the host processor are outside the
  hardware. The image enters as 8-bit grayscale.
