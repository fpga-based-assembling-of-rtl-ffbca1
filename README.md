# Face tuning engine: hiding the seams of an assembled face

A face can be built from parts: a blank face (head outline, hair, ears)
plus separately stored eyebrows, eyes, nose and lips, each picked to match a
verbal description and pasted at its place. Pasted as they are, the parts
keep their own brightness, and a visible edge runs round each of them. This
RTL is the hardware step that removes those edges. For every pixel that
belongs to a pasted part, it replaces the face intensity with a weighted mean
of face and part intensity. The weight depends on how bright the face is
around that pixel compared with the part.

The algorithm, the 23 x 28 image size and the threshold test come from
S. Halder, D. Bhattacharjee, M. Nasipuri, D. K. Basu and M. Kundu, "FPGA Based
Assembling of Facial Components for Human Face Construction", which describes
the FASY face-synthesis system. Its tuning phase is the part put on an FPGA.
The memory organisation, the sequencing, the number formats and the host
interface are this implementation's own choices. The section "Where this
departs from the publication" lists every such choice.

## The computation

Three images are involved. All are grayscale, 8 bits per pixel, `HEIGHT`
rows by `WIDTH` columns, and stored row-major (address = row*WIDTH + col):

* **I1**: the blank face.
* **I2**: the components already placed at their final positions on a black
  background. Placing them (finding the ear corner, then offsetting each
  part from it) is done on the host before the engine runs. An image with a
  single component, such as only the lips, is the simplest case.
* **I3**: the result. It starts as a copy of I1.

For every interior pixel (x, y), the first and last rows and columns excluded:

1. If `I2(x,y) <= T`, the pixel is background of the component image and
   I3 keeps the face value.
2. Otherwise it belongs to a component. Form the two 3x3 neighbourhood sums
   `FI = sum I1` and `CI = sum I2` over rows x-1..x+1 and columns y-1..y+1.
3. With the intensity factor `IF = FI / CI`, write
   `I3(x,y) = (I1(x,y) + 2*IF*I2(x,y)) / (1 + 2*IF)`.

When the surrounding face is bright compared with the component, IF is large
and the pixel is mostly the component's own value. When the component is
bright compared with the face, IF is small and the face value pulls it down.
The result always lies between the face value and the component value.

### Integer form

The engine never forms IF. It multiplies numerator and denominator by CI:

    I3(x,y) = floor( (I1(x,y)*CI + 2*FI*I2(x,y)) / (CI + 2*FI) )

This is exact up to the single final truncation. Bit widths for 8-bit pixels:

| quantity        | largest value            | bits |
|-----------------|--------------------------|------|
| FI, CI          | 9 * 255 = 2295           | 12   |
| denominator     | 2295 + 2*2295 = 6885     | 13 (14 used) |
| numerator       | 3 * 255 * 2295 = 1755675 | 21 (22 used) |
| quotient        | <= 255                   | 8    |

The quotient is a weighted mean of two 8-bit values, so it is below 256. A
restoring divider therefore needs only 8 steps, not 21. The denominator is
never zero: a pixel is blended only when `I2(x,y) > T >= 0`, so `CI >= 1`.

## Hardware structure

```
            load port                                   read port
               |                                           ^
      +--------+--------+                                  |
      v                 v                                  |
 [image_ram I1]   [image_ram I2]                     [image_ram I3]
      |  (shared read address)  |                          ^
      +------+----------+-------+                          | write
             |          |                                  |
   [window_accumulator FI] [window_accumulator CI]         |
             |          |                                  |
             +--> [intensity_blend] --> result ------------+
                        ^
              [tuning_controller] drives addresses, accumulator
              clear/enable, blend start and the I3 write
```

| module               | role |
|----------------------|------|
| `tuner_pkg`          | pixel and sum types, default sizes, controller state encoding |
| `image_ram`          | single-port synchronous frame memory, read data one cycle after the address |
| `window_accumulator` | serial 3x3 sum, one pixel per cycle, `clr` starts a new sum |
| `intensity_blend`    | forms numerator and denominator, then an 8-step restoring division |
| `tuning_controller`  | the scan: copy, centre test, window read, blend, write back |
| `face_tuner`         | top level: three memories, two accumulators, blend unit, controller, host muxing |

### The scan, state by state

| state    | cycles | what happens |
|----------|--------|--------------|
| `COPY`   | `WIDTH*HEIGHT` | read I1 at address k; I3[k] is written one cycle later |
| `CENTER` | 1      | read I1 and I2 at the centre address |
| `TEST`   | 1      | latch both centre values; `I2 > T` goes to `WINDOW`, otherwise to `NEXT` |
| `WINDOW` | 9      | issue the nine window addresses (start at centre - WIDTH - 1, step +1, +1, +WIDTH-2, ...); data returns a cycle later into both accumulators |
| `BLEND`  | 11     | wait one cycle for the last sum, pulse `blend_start`, wait 9 cycles for `done`, write I3 |
| `NEXT`   | 1      | next column, or first interior column of the next row (+3 on the address) |
| `DONE`   | 1      | end of the run; `done` pulses the cycle after |

A run therefore takes

    cycles = WIDTH*HEIGHT + 3*(pixels rejected by T) + 23*(pixels blended) + 1

counted from the cycle after `start` up to and including the cycle in which
`done` is high. At 23 x 28 there are 21*26 = 546 interior pixels. A run lasts
2,283 cycles when no pixel passes T and 13,203 when every pixel does. FI is
read from I1, the unmodified face, and never from I3. Each output therefore
depends only on the inputs, not on the scan order. Reading the window from I3
would blend already-blended neighbours. The algorithm states that FI is summed
over the original face.

## Host interface of `face_tuner`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset of the control logic (memories are not reset) |
| `threshold` | in | 8 | T; keep it stable during a run |
| `load_we`, `load_sel`, `load_addr`, `load_data` | in | 1, 1, 10, 8 | write one pixel of I1 (`sel=0`) or I2 (`sel=1`) |
| `start` | in | 1 | begin a run (taken when idle) |
| `busy` | out | 1 | run in progress |
| `done` | out | 1 | one-cycle pulse at the end of a run |
| `rd_addr`, `rd_data` | in, out | 10, 8 | read I3; data one cycle after the address |

Loads and reads are ignored while `busy` is high, because the engine then owns
all three memory ports. I1 and I2 survive a run. A second run with another T
needs no reload.

## Where this departs from the publication

* **Border pixels.** The published hardware algorithm loops `x = 2..m`,
  `y = 2..n`, but it reads `x+1` and `y+1`, which lie outside the image on the
  last row and column. Here the last row and column are skipped like the
  first. A component pixel above T on the border keeps the face value.
* **Which pixels are blended.** The software version of the algorithm copies
  where the binary mask of the component is 0 (dark). The hardware version
  tests `I2(x,y) > T` on a component image with a black background. This
  design follows the hardware version. T is a run-time input, because no
  value is published.
* **Index slip.** The published step `I3(x,y) = (... I2(i,j))` uses undefined
  `i, j`; `I2(x,y)` is used, as in the equation that introduces the method.
* **Numbers.** Pixel width (8 bits), evaluation without a fractional IF,
  and truncation of the quotient are choices made here. The publication gives
  the equation in real arithmetic.
* **Image orientation.** "23 x 28" is read as 23 columns by 28 rows: the full
  faces are 92 x 112, and faces of that database are 92 pixels wide by 112
  high.
* **Storage and size.** The publication reports 72 flip-flops and 41 LUTs on
  a Spartan-II XC2S15, but does not say where the images were held. It
  describes its images as text files fed through a Simulink model. This design
  holds all three frames on chip, 3 x 644 x 8 = 15,456 memory bits, with about
  150 flip-flop bits of control and datapath. Its size is not comparable with
  the published figures. The published RTL schematics carry no legible detail
  and were not used.
* **Not in hardware.** Query handling, database search, ear detection and
  component placement, and writing the image text files are host software in
  the FASY system. They are not part of this RTL. The testbenches generate
  already-placed component images instead.

## Sizes

`WIDTH` and `HEIGHT` are parameters of `face_tuner` and `tuning_controller`
(default 23 and 28, from `tuner_pkg`). Addresses widen automatically.
The 92 x 112 full-resolution faces need `WIDTH=92, HEIGHT=112`: 14-bit
addresses and 3 x 10,304 bytes of memory. The sums and the divider stay as
they are, because they depend only on the pixel width and the 3x3 window.
Both must be at least 3. Changing the pixel width means changing `PIX_W` in
`tuner_pkg`. All widths derive from it.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_image_ram` | full write/read-back at 644 words, one-cycle latency, read-before-write, out-of-range addresses |
| `tb_window_accumulator` | 300 random windows with random idle gaps, the all-255 maximum, clear and reset |
| `tb_intensity_blend` | about 400 random and corner operand sets against the integer formula. Also checks that the formula agrees with the real-valued equation to within the truncation, that the latency is exactly 9 cycles and that `start` is ignored while busy |
| `tb_tuning_controller` | 9 x 7 image, real accumulators and blend unit, memories modelled in the testbench. Checks all of I3, the number of blends and the run length, at T = 20 and T = 255 |
| `tb_face_tuner_92x112` | the same end-to-end procedure at the full 92 x 112 face resolution (parameter override), about 52,000 cycles per run |
| `tb_face_tuner` | the whole engine at its default 23 x 28 size without parameter overrides. Loads through the host port, runs at T = 20 and T = 255 and checks every pixel and the run length. Counts copies, threshold rejections, blends, border pixels kept, and host writes ignored while busy, and fails if any never happens |

The reference model (`tb/tune_ref_pkg.sv`) recomputes the algorithm in plain
integer SystemVerilog. It also generates the test images: a shaded face with
noise, and a black component image with dark noise below 16 and bright
rectangles standing in for eyebrows, eyes, nose and lips. One rectangle
touches the border.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_face_tuner \
        rtl/tuner_pkg.sv tb/tune_ref_pkg.sv tb/tb_face_tuner.sv
    ./obj_dir/Vtb_face_tuner

Verilator finds the remaining modules through `-Irtl`. The full-size run
takes well under a second.

What is not verified: timing closure on any FPGA, and visual quality on real
face images. The tests check that the RTL computes the stated equation, not
that the equation produces a natural-looking face.
