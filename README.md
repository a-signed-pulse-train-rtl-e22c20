# Signed pulse-train convolution array

This is synthesizable SystemVerilog for an in-sensor image processor array. It convolves
an image with a kernel of any size whose coefficients may be fractional and negative. It
follows the architecture of Danesh and Habibi, *A signed pulse-train based image
processor-array for parallel kernel convolution in vision sensors*. This RTL is an
independent implementation of that architecture. Where the publication leaves a detail
open, the choice made here is stated below.

## The idea in three sentences

Each pixel reaches its processor as one wire carrying a pulse. The pulse width
encodes the light level (pulse-width modulation, PWM). Multiplying by a coefficient means
sampling that pulse at a rate proportional to the coefficient and counting the samples
that find it high. A negative coefficient makes the counter count down instead of up.

Three consequences shape the hardware:

* **No multipliers.** A pixel processor is a sampler, a few one-bit shift stages and
  two 8-bit up/down counters.
* **Any kernel size with only nearest-neighbour wires.** A pixel's sample reaches a
  processor d places away after d - 1 shifts through the cells in between.
* **2D as two 1D steps.** A vertical step leaves the 1D result Rt in a counter. That
  counter then replays Rt as a new pulse (|Rt| slots wide, with a sign bit). The
  horizontal step convolves those pulses into the final result Rs.

## Arithmetic: what the array computes

A PWM period is divided into `N_SLOTS` = 256 sample slots. A pixel of value P drives a
PWM that is high for the first D = P slots. A kernel tap is a sign s and a *sample
count* n in 0..256. During one 1D step the tap's strobe fires in exactly n of the 256
slots, spread evenly: it fires in slot t when floor((t+1)n/256) > floor(tn/256). A
strobe that finds the PWM high counts one.

For one pass, with vertical taps (s_d, n_d) and horizontal taps (s_e, n_e),
d, e = -m..m, the results are:

    Rt(r,c) = sum_d  s_d * floor( D(r-d, c) * n_d / 256 )
    Rs(r,c) = sum_e  s_e * sign(Rt(r, c-e)) * floor( |Rt(r, c-e)| * n_e / 256 )

Row 0 is the top and column 0 the left edge. A positive offset means *up* in the
vertical step and *left* in the horizontal step. This convention comes from the
published cell drawings, where cell (i, j+1) sits above (i, j) and cell (i+1, j) sits to
the left of (i, j).

What this means in practice:

* **Weights are n/256 per step**, so a tap weight lies in [-1, 1]. A kernel with larger
  entries is applied scaled down. The published work calls this normalisation: a
  dim image can take a larger scale than a bright one. For example, the edge kernel
  with centre 8 is applied as 1/9 of itself.
* **Exactness.** A tap with n = 256 counts every slot, so it multiplies exactly. A
  kernel whose taps are all ±256 (such as edge detection 2 below) gives a
  bit-exact result. Otherwise the only error is the floor in each product.
* **Clipping.** Both counters hold -255..+255 (8-bit magnitude plus sign) and stick at
  the limit instead of wrapping. Counting is interleaved slot by slot, so clipping
  depends on that order. `tb_pta_top` models this exactly.
* **Non-separable kernels.** The final counter is cleared only at the start of a
  frame, so a frame may run up to `MAX_PASSES` = 3 passes, and their results add. A
  kernel that is a sum of k separable kernels needs k passes. This multi-pass
  sequencing is an addition of this design. The publication describes one vertical and
  one horizontal step, but evaluates kernels that are not separable.

### The evaluated kernels as configurations

| kernel | passes (vertical taps  x  horizontal taps, as sample counts) | applied as | cycles/frame |
|---|---|---|---|
| Edge detection 1 `[-1 -1 -1; -1 8 -1; -1 -1 -1]` | `[256]x[256]` + `[85 85 85]x[-85 -85 -85]` | ≈ kernel/9 | 2052 |
| Edge detection 2 `[1 0 -1; 0 0 0; -1 0 1]` | `[256 0 -256]x[256 0 -256]` | exact | 1539 |
| LoG 5x5 (centre -16) | `[128 0 0 0 128]x[32]` + `[128 0 128]x[32 64 32]` + `[256]x[16 32 -256 32 16]` | kernel/16 | 4613 |
| Sharpening `[0 -1 0; -1 5 -1; 0 -1 0]` | `[256]x[-51 256 -51]` + `[-51 0 -51]x[256]` | ≈ kernel/5 | 2052 |

Tap lists run from offset +m (up/left) down to -m (down/right). In the configuration
record, `taps[k]` holds offset k - MAX_HALF.

## Timing: frames, passes, steps, slots

The `array_controller` sends one control bundle (`pe_ctrl_t`) to every cell. All cells
therefore work in lock step, and every pixel's result is ready in the same cycle.

    start -> RS (1) -> { CLRV (1), vertical step, horizontal step } x passes -> DONE (1)

* A **step** is 256 slots.
* A **slot** of a step with half-width m takes 1 + 2m cycles:

  | cycle | Load/Shift | Sample_CLK | what is counted | shift stages |
  |---|---|---|---|---|
  | 0 | 0 (load) | - | own PWM, centre tap | load own sample |
  | 2d-1 | 1 | 0 | up/left neighbour, tap +d | hold |
  | 2d | 1 | 1 | down/right neighbour, tap -d | shift if d < m |

* The counter reads a neighbour's bit from that neighbour's shift stage. Right after
  the load, that bit is the neighbour's own sample, at distance 1. Each later shift
  adds one place of distance.
* In the horizontal step, `Down_Step_CLK` is raised in the last cycle of every slot. It
  moves the vertical counter one step toward zero. As a result, the pixel's
  regenerated PWM is high in slot t exactly when t < |Rt|.
* **Frame length**, counted from the clock edge that takes `start` to the edge that
  raises `done`:

      2 + sum over passes of (1 + 256 * (2 + 2*m_v + 2*m_h))

  A separable 3x3 kernel takes 1539 cycles, so 10 000 frames/s need about 15.4 MHz. A
  two-pass 3x3 kernel takes 3077 cycles (30.8 MHz). The publication quotes 31 MHz
  for a 3x3 kernel at 10 000 frames/s with 256 samples per period. That figure
  implies 12 clocks per sample, against 6 here.

The photodiode front end is analog and is not part of this RTL. It must present each
pixel's PWM on `pwm_in[r][c]` during the vertical step, high in slot t while t < P. The
current slot is available on `slot` and the step on `vh`. During the horizontal step
`pwm_in` is ignored.

## The pixel processor

`pixel_processor` holds the five units of the published cell, with the published pin
names:

* **`sampler`**: chooses the PWM source with V/H. In the vertical step (V/H = 0) the
  source is the photodiode (`P_Data_In`). In the horizontal step (V/H = 1) it is the
  cell's own regenerated pulse (`PWM_In`). The chosen PWM goes to the data shifter.
  The sampler also presents to the counter either the own bit (load cycle) or the bit
  from the up/left or down/right neighbour, as selected by Sample_CLK.
* **`data_shifter`**: two one-bit stages. Stage A travels down (vertical) or right
  (horizontal) and stage B travels up or left. Only the pins of the active direction
  are driven.
* **`sign_generator`**: sets the counting direction. In the vertical step it is the
  tap's sign (`General_Sign`). In the horizontal step it is the tap's sign XOR the sign
  of the data being counted.
* **`sign_shifter`**: two one-bit stages that carry each pixel's result sign to its
  left and right neighbours during the horizontal step.
* **`result_counter`**: holds the vertical counter (Rt, which then drives `PWM_Out` and
  the `Sign bit`) and the final counter (Rs). `Final_Result` is 9 bits: sign, then
  8-bit magnitude.

Every "clock" pin of the published schematic (Sample_CLK, Shift_CLK, Counter_CLK,
Down_Step_CLK, Sign_Shift_CLK) is here a one-cycle enable in a single clock domain.
Sample_CLK is used as a select level. The pin polarities (V/H, Load/Shift, Sample_CLK)
were read from the input numbering of the schematic's multiplexers.

`processor_array` tiles `ROWS` x `COLS` cells (default 32 x 32). Links that would leave
the array read 0, so the image is zero-padded.

## Configuration and interface (`pta_top`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `start` | in | one-cycle pulse while idle; `cfg` is latched at that edge |
| `cfg` (`frame_cfg_t`) | in | `n_passes` (1..3); per pass `v_half`, `h_half` (0..2) and 5 `v_taps`/`h_taps` of `{neg, n[8:0]}` |
| `pwm_in[ROWS][COLS]` | in | photodiode PWM per pixel |
| `slot`, `vh` | out | current slot and step, for the front end's ramp |
| `busy`, `done` | out | frame in progress; one-cycle end-of-frame pulse |
| `result[ROWS][COLS]` | out | `{sign, magnitude[7:0]}`, valid from `done` until the next `start` |

`pta_pkg` holds the sizes: `N_SLOTS` 256, `MAG_W` 8, `MAX_HALF` 2 (5x5 kernels; the cells
themselves have no size limit, only the coefficient table does), `MAX_PASSES` 3. The
controller carries assertions that reject `n_passes` and half-widths out of range.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and has a cycle watchdog.
Here is how to run one with Verilator 5:

    verilator --binary --timing --assert -Irtl rtl/pta_pkg.sv tb/tb_pta_top.sv --top-module tb_pta_top
    ./obj_dir/Vtb_pta_top

| testbench | what it checks |
|---|---|
| `tb_sampler`, `tb_sign_generator` | all input combinations against a table |
| `tb_data_shifter` | random stimulus against a reference; a 5-cell chain delivers the sample k places away after k shifts |
| `tb_sign_shifter` | random stimulus against a reference |
| `tb_result_counter` | random biased counting into and out of the clip; PWM regeneration width and sign for 12 values including ±255 |
| `tb_coeff_rate_gen` | strobe pattern slot by slot and total count for 40 sample counts; restart |
| `tb_array_controller` | every control signal in every cycle of three random frames; frame length |
| `tb_pixel_processor` | one cell with emulated neighbours through both steps; outgoing data and sign bits |
| `tb_processor_array` | 5x6 array under a testbench sequencer, random two-pass kernels up to 5x5, far shifts, borders |
| `tb_pta_normalization` | full 32x32 design, the four kernels at 1x, 2x and 3x sampling rate on two scenes, every pixel exact against the golden model; PSNR must rise with the rate |
| `tb_pta_top` | full 32x32 design: the four kernels above on a normal and a dim synthetic scene, plus a clipping frame; every pixel exact against a slot-by-slot golden model; frame length; each mechanism (down counting, shifts beyond distance 1, multi-pass, PWM regeneration, clipping) must occur |

`tb_pta_top` also prints the PSNR of each result against the ideal real-valued
convolution with the same scaled kernel. These are typical values on its synthetic
32x32 scene (the scene is randomised per run):

| kernel | normal scene | dim scene |
|---|---|---|
| edge detection 1 (/9) | ~39 dB | ~37 dB |
| edge detection 2 | exact | exact |
| LoG (/16) | ~37 dB | ~37 dB |
| sharpening (/5) | ~42 dB | ~41 dB |

`tb_pta_normalization` runs the four kernels again with every horizontal sample count
multiplied by k = 1, 2, 3 (a k-times faster sampling clock). It divides the result by
k and compares it with the ideal convolution at k = 1. The floor error stays below one
count per product, so the error shrinks as k grows. The testbench fails if PSNR does not
improve from k = 1 to k = 3. Typical output:

| kernel (normal scene) | k = 1 | k = 2 | k = 3 |
|---|---|---|---|
| edge detection 1 | 44 dB | 49 dB | 50 dB |
| edge detection 2 | 49 dB | 55 dB | 56 dB |
| LoG 5x5 | 37 dB | 43 dB | 46 dB |
| sharpening | 44 dB | 49 dB | 50 dB |

The dim scene gives nearly the same figures, because the error is measured in output
counts. The vertical step keeps its k = 1 floor error, which is why the gain levels
off.

These figures are the same order as the 27-52 dB range published for natural images, and
edge detection 2 is exact there as well. The published test images and their
resolution are not available, so this is not a reproduction of those numbers.

## Where this RTL departs from, or adds to, the published design

* **Single clock and enables** in place of separately generated gated clocks.
* **Own-sign path in the sign generator.** The published drawing shows only the
  left/right neighbour sign inputs. The centre tap of the horizontal step counts the
  cell's own signed pulse, so the own sign is selected in the load cycle.
* **Final counter enabled only in the horizontal step.** The wiring of its enable
  could not be read from the drawing. Counting in both steps would add Rt into Rs.
* **Clear of the vertical counter at each pass (CLRV).** This is needed for
  multi-pass frames.
* **Multi-pass frames** for non-separable kernels (see above).
* **Clipping counters** (the publication says only that 8-bit registers lose data).
* **Controller and slot schedule** are this design's. The publication gives the
  controller's function (global coefficient clocks, global sign, load and shift
  phases) but not its structure. Its quoted clock rates imply 12 cycles per sample
  against 6 here.
* **Array size** (32 x 32) and **zero padding** at the edges are choices; the
  publication gives neither.
* The photodiode and comparator front end is analog and is outside the RTL.
