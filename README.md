# A multiplier-free CeNN layer with power-of-two templates

A cellular neural network (CeNN) is a grid of simple cells, one per image
pixel. Each cell has a state `x`, an output `y` and an input `u`, and it talks
only to its 3×3 neighbourhood. Running the network for a number of iterations
turns an input image into an output image. Segmentation and edge or obstacle
detection are typical uses, and the weights are trained offline. In discrete
time, one iteration is a forward-Euler step:

```
x(n+1) = x(n) + dt · ( −x(n) + I + Σ A·y(n) + Σ B·u )
y(n+1) = f(x(n+1)) = clamp(x(n+1), −1, +1)
```

- `A` is the 3×3 feedback template and `B` the 3×3 feedforward template.
- `I` is a bias and `dt` the step size.
- Each sum runs over the nine cells of the neighbourhood.

This RTL builds such a network as a **deep pipeline of stages**, with one
stage per Euler iteration. Pixels stream through the stages in raster order.
The templates are *time-variant*: every stage has its own `A`, `B`, `I` and
`dt`.

The key idea is that the coefficients of `A` and `B` are **quantized to powers
of two**, `{0, ±2^p}` with `k ≤ p ≤ m`. Every product of a template with data
then becomes a shift, so the datapath has no multiplier at all. Two further
properties of quantized templates are used to save cycles:

- **Sparsity:** many coefficients quantize to zero, and those taps are skipped.
- **Repetition:** many non-zero coefficients are equal. Their data can be added
  first and shifted once: `a·b1 + a·b2 + a·b3 = a·(b1+b2+b3)`.

Finding the quantized templates (the training and the incremental quantization
procedure) is done offline in software and is not part of the RTL.

## Number formats

| quantity | format |
|---|---|
| `u`, `x`, `y` | 18-bit signed, Q5.12 (+1.0 = 4096) |
| coefficient `qcoef_t` | `{nz, sgn, e}`, 6 bits; value = `nz ? ±2^(e+k) : 0` with `m = 5`, `k = −5` |
| bias `I` | 18-bit Q5.12, not quantized |
| `dt` | `2^−s`, `0 ≤ s ≤ 7`, stored as `s` (3 bits) |
| products and sums | wide format with 12 − k = 17 fraction bits |

The shifter products and the sums are kept in the wide format. A shift by a
negative exponent therefore never loses a bit. The only rounding happens when
the new state is brought back to Q5.12: a floor after the `dt` shift, followed
by saturation to the 18-bit range. The widths are as follows:

- shifter operand 22 bits, enough for a datum or a sum of nine data;
- product 32 bits;
- convolution accumulator 36 bits;
- stage sum 39 bits.

The 6-bit coefficient code is exactly the bit width that the set `m = 5`,
`k = −5` requires.

## Hierarchy

```
cenn_layer                     NUM_STAGES stages in a valid/ready chain
└─ cenn_stage  (× NUM_STAGES)  one Euler iteration over the whole image
   ├─ window_fifo              two line memories + 3×3 window, zero boundary
   ├─ conv2d_unit  (A·y)       multiplier-free 3×3 convolution
   │  ├─ data_scheduler        template → per-pixel work list
   │  └─ shifter_s1 (× N_SHIFT) product = datum shifted by the coefficient exponent
   ├─ conv2d_unit  (B·u)
   ├─ shifter_s2               multiply by dt (arithmetic right shift)
   └─ cenn_output_fn           y = clamp(x, −1, 1)
```

The shared types and constants live in `cenn_pkg`.

## The 2D convolution unit and its scheduler

This is the least obvious part of the design.

A `conv2d_unit` takes one 3×3 window per "start" and produces `Σ coef·data`.
Its parts are:

- a register bank that holds the nine data;
- a coefficient counter that steps through a **work list**;
- `N_SHIFT` lanes, each a multiplexer feeding one `shifter_s1`;
- a *side adder* that sums data sharing a repeated coefficient;
- an accumulator.

The work list depends only on the template, so `data_scheduler` builds it once,
when a template is loaded. It does not rebuild it per pixel.

**The list-building rule.** The description this design follows gives the
mechanism and one worked example, but not a general algorithm. The rule below
is this design's own:

- Drop the zero taps (sparsity). Let `nact` be the number of taps that remain.
- Find the non-zero coefficient value that occurs most often, `r` times. On a
  tie, take the one whose first tap comes earliest in row-major order.
- Pre-sum the first `j = min(r, ⌊nact/2⌋)` members of that group in the side
  adder, one datum per cycle, while the shifter handles the other taps.
- The shifter list is:
  1. the non-group taps, in tap order;
  2. then the group members that were not pre-summed;
  3. last, the group sum, multiplied by the shared coefficient.
- A list has `nact − j + 1` items. Repetition is used only when `j ≥ 2`.

Because `j ≤ nact/2`, the side adder has always finished before the group sum
is needed.

**Worked example.** Take six non-zero taps, four of them equal to `a1`. The
rule gives `b5·a2, b9·a3, b8·a1, (b2+b4+b6)·a1`: four cycles instead of nine.
The testbench checks this example item by item.

**Several shifters.** When `N_SHIFT > 1`, repetition is switched off, because
it gains little there. Items are dealt `N_SHIFT` per cycle, so a window takes
`⌈nnz/N_SHIFT⌉` cycles (at least one).

**Cycles per pixel with one shifter:**

| option | cycles per pixel |
|---|---|
| dense | 9 |
| `SPARSITY` | `nnz` |
| `SPARSITY` + `REPETITION` | `nnz − j + 1` |

Take the symmetric segmentation template used in the full-size test: `A` with
distinct non-zero values `a0..a4`, and `B` with a four-fold repeated value.
Both convolutions take 8 cycles per pixel or fewer, and the stage runs at the
slower of the two.

**Building the schedule.** The scheduler is a small finite-state machine:

- one COUNT pass, one tap per cycle, finds the most repeated value;
- one SEL cycle fixes `j`;
- two BUILD passes fill the adder list and the shifter list.

That is 29 cycles, during which `busy` is high. The unit accepts no window
while `busy` is high.

A first version built the list combinationally. It worked, but it cost about
800 cells per unit for logic that matters only at load time.

**Timing.** The unit accepts a window every `cycles` clock cycles: `ready` comes
back in the last shifter cycle. The result appears `cycles + 2` cycles after
start: one cycle for the shifter register and one for the accumulator.

## One stage

`window_fifo` holds the two previous image rows in two line memories of
`IMG_W` words, plus a 3×3 register window.

- Pushing the pixel at (R, C) completes the window centred on (R−1, C−1), so
  the centre lags the input by `img_w + 1` pixels.
- Neighbours outside the image read as zero.
- The window is available in the same cycle as the push, so a convolution can
  start at once.
- `u` and `x` ride through the line buffer with `y`. This way the centre
  cell's own `x` and `u` line up with its window.

**Starting a pixel.** `cenn_stage` takes an input pixel when three conditions
hold:

- both convolution units are ready;
- the frame is not being flushed;
- a slot is free in its 8-entry output FIFO. The slot is reserved at start
  through a credit counter, so downstream back-pressure can never overflow the
  pipeline. An assertion guards this.

A new pixel therefore enters every `max(cycles_a, cycles_b)` cycles in a steady
stream.

**Combining the results.** When both sums are available:

1. The stage forms `ΣA·y + ΣB·u + I − x` in the wide format.
2. It shifts that right by `s` in `shifter_s2` (the multiply by `dt`).
3. It adds `x`, floors to Q5.12 and saturates.
4. It applies the output function.

Note the `−x` term. The block diagram of the architecture leaves it out, but
the Euler equation contains it, and this design follows the equation.

**Frame end.** After the last pixel of a frame, the stage pushes `img_w + 1`
padding pixels of its own to bring out the last row and a half. Only then does
it accept the next frame.

**Frame size.** The size `img_w × img_h` is a run-time input, bounded by the
`IMG_W × IMG_H` parameters (default 1920 × 1080).

## The layer

`cenn_layer` chains `NUM_STAGES` stages with valid/ready links:

- stage n turns `(u, x(n), y(n))` into `(u, x(n+1), y(n+1))`;
- the input stream carries `u`, `x(0)` and `y(0)` for every pixel;
- after the last stage, the stream holds the result of `NUM_STAGES`
  iterations.

Stages overlap: stage n+1 starts on the first rows while stage n is still busy
with later ones. A frame therefore takes about `img_w·img_h·max(cycles)` clock
cycles, plus `NUM_STAGES·(img_w + a few)` cycles of fill. All templates are
loaded together by one `cfg_load` pulse between frames. `cycles_a` and
`cycles_b` report each stage's schedule length.

The default configuration has 24 stages and one shifter per convolution unit,
with sparsity and repetition enabled. The paper's FPGA experiment reached
that stage count, at 8 cycles per pixel, in its "one shifter + repetition"
configuration.

Other configurations are available through parameters:

| configuration | parameters |
|---|---|
| 28 stages without repetition | `NUM_STAGES=28 REPETITION=0` |
| 16 stages with three shifters | `NUM_STAGES=16 N_SHIFT=3` |
| 7 stages with nine shifters, one cycle per pixel | `NUM_STAGES=7 N_SHIFT=9` |

Running more iterations than there are stages means passing a frame through the
layer again.

**Time-invariant templates.** With `TIME_VARIANT=0`, every stage takes
`tpl[0]` and the other entries are ignored. This is the classic CeNN, whose
templates are the same at every iteration. The architecture this design follows goes further for that case. Because
`u` and `B` never change, it drops the `u` line buffer and the `B·u`
convolution from the stage. Here every stage still computes `B·u` itself.
The results are the same, but the area is larger.

Synthesis at the default size gives about 19k cells, 38k flip-flop bits and
48 line memories of 1920 × 54 bits, about 5 Mbit.

## Where this design departs from the paper or fills gaps

- **The `−x` term** is added before the `dt` shift. The equation has it; the
  stage block diagram does not.
- **The binary point** of the 18-bit data (Q5.12), the wide intermediate
  format, the floor rounding and the saturation are this design's choices.
  The paper gives only the width.
- **The general scheduling rule** (above) is this design's own. Only the worked
  example is given, and it is reproduced exactly.
- **The cycle counts of the baselines differ.** The reference implementation
  reports 11 cycles per pixel for one shifter, with or without sparsity, and
  5 cycles for three shifters. This unit needs 9 (dense), `nnz`, or
  `⌈nnz/3⌉` cycles. What the extra cycles were spent on is not described, so
  it is not modelled.
- **Everything around the datapath is this design's choice:** the zero
  boundary, the valid/ready handshakes, the output FIFO, the flush at frame
  end, the run-time frame size, and the load-time schedule build.
- **Time-invariant mode keeps the `B·u` branch.** With `TIME_VARIANT=0`,
  every stage still computes `B·u`. The architecture would remove the `u` line
  buffer and the `B` convolution from the stage in that mode.
- **Not built:** the offline training and incremental quantization of the
  templates (software), and the DSP-multiplier baseline the paper compares
  against.

## Files

| file | contents |
|---|---|
| `rtl/cenn_pkg.sv` | formats, `qcoef_t`, `tpl_t`, `pixel_t`, `sched_t` |
| `rtl/shifter_s1.sv` | registered product: datum << e, negated for a negative coefficient |
| `rtl/shifter_s2.sv` | registered arithmetic right shift by `s` |
| `rtl/cenn_output_fn.sv` | clamp to ±1 |
| `rtl/data_scheduler.sv` | work-list builder (sparsity, repetition, lanes) |
| `rtl/conv2d_unit.sv` | multiplier-free 3×3 convolution |
| `rtl/window_fifo.sv` | line buffers and 3×3 window |
| `rtl/cenn_stage.sv` | one Euler iteration |
| `rtl/cenn_layer.sv` | top: chain of stages |

## Tests

Every testbench checks itself against a bit-exact reference model in
`tb/cenn_ref_pkg.sv`, written independently of the RTL. Each prints
`TB_RESULT checks=… failures=…` and has a watchdog.

| testbench | what it covers |
|---|---|
| `tb_shifter_s1` | all exponents and signs, random data |
| `tb_shifter_s2` | all shift amounts, random data |
| `tb_cenn_output_fn` | every 18-bit input |
| `tb_data_scheduler` | the worked example item by item; random templates, each list executed and compared; adder-before-use rule; 29-cycle load |
| `tb_conv2d_unit` | 1 shifter with sparsity and repetition, 1 shifter with sparsity only, 1 shifter dense, 3 shifters, 9 shifters: results, window rate and latency |
| `tb_window_fifo` | 7×5 frames, every window and centre position, two frames back to back |
| `tb_cenn_stage` | 9×6 frames against the Euler reference, input rate, random back-pressure |
| `tb_cenn_layer` | 4 stages, two frame sizes. It counts and requires: sparse and repeated templates, input and output stalls, saturation of `x` and clamping of `y`, frame flushes, and a frame-size change |
| `tb_cenn_layer_par` | 7 stages × 9 shifters on 64×16 frames at one pixel per cycle, time-invariant mode |
| `tb_cenn_layer_obstacle` | 24 stages, one shifter, obstacle-detection template structure (one value on the eight neighbours, another at the centre): 6 cycles per pixel, 128×72 frame |
| `tb_cenn_layer_full` | default parameters: one 1920×1080 frame through 24 stages, every output pixel compared, 8 cycles per pixel checked |

The full-size run takes about 3.5 minutes in Verilator; the others take
seconds.

To simulate one testbench with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps -Irtl -Itb \
    rtl/cenn_pkg.sv tb/cenn_ref_pkg.sv tb/tb_cenn_layer.sv \
    -y rtl -y tb +libext+.sv --top-module tb_cenn_layer
./obj_dir/Vtb_cenn_layer
```

Lint warnings that remain are harmless: unused package constants, unconnected
debug outputs (`ctr_row`/`ctr_col`) and the reset used both in logic and in the
`disable iff` of an assertion.

To change the design, edit the parameters on `cenn_layer`:

- `NUM_STAGES`, `N_SHIFT`, `SPARSITY`, `REPETITION`, `TIME_VARIANT`;
- `IMG_W` and `IMG_H`, the largest frame.

The quantization range (`QM`, `QK`) and the data format (`DW`, `FRAC`) are
constants in `cenn_pkg`.
