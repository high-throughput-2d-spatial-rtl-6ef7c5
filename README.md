# A streaming 2D spatial filter with border handling

This is a WIN x WIN linear spatial filter (2D convolution) for a raster-scan
pixel stream. It takes one pixel per clock and returns one filtered pixel per
clock. It never stores a whole frame, and it never stops the input stream, not
even at image borders. All WIN x WIN coefficients can be rewritten at run time,
so the same hardware can blur, sharpen, remove noise or find edges, depending on
what the higher layers of a vision system ask for. The default build has a
7 x 7 window, 8-bit pixels, 15-bit signed coefficients and 640 x 480 frames.

The structure is the *direct form* of the filter. Every window pixel has its
own multiplier, and a separate pipelined adder tree built from plain fabric
adders sums the 49 products. The RTL is written in portable, synthesizable
SystemVerilog with no vendor primitives. It follows the published
architecture of Al-Dujaili and Fahmy ("High Throughput 2D Spatial Image
Filters on FPGAs"): the direct form with the logic-fabric ("LOG") adder tree
and border management by overlapped priming and flushing. Where that
description stops, this implementation makes its own choices, listed in
[Departures and own choices](#departures-and-own-choices).

## Data path

```
 in_pixel ──┬──────────────────────────────► window row 6 ─┐
            │                                               │
            └► row buffer 0 ─┬─────────────► window row 5 ─┤   window_cache
                             └► row buffer 1 ─► ... row 4 ─┤   (7 x 7 regs)
                                 ...                        │
                             row buffer 5 ──► window row 0 ─┘
                                                             │ raw window
                                 centre row/col, policy ──► border_manager
                                                             │ bordered window
                         coef_file (49 x 15 bit) ─────────► multiplier_array
                                                             │ 49 products, 3 cycles
                                                           adder_tree
                                                             │ 6 levels, 6 cycles
                                                         out_pixel (29 bit)
 control_unit: handshake, stepping, priming/flushing, centre position
```

| Module | Role |
|---|---|
| `filter_pkg` | default sizes, `border_mode_e`, the `pix_tag_t` frame markers, `border_map()` |
| `row_buffers` | WIN-1 cascaded delays of exactly one image row |
| `window_cache` | WIN rows of WIN shift registers |
| `border_manager` | replaces window pixels that lie outside the image |
| `coef_file` | WIN*WIN coefficient registers with a write port |
| `multiplier_array` | WIN*WIN pipelined multipliers |
| `adder_tree` | pipelined binary tree of 2-input adders |
| `control_unit` | state machine: accept, step, prime, flush, track position |
| `spatial_filter_top` | wires the above together |

## How the window sees the image

The filter moves in *steps*. In each step one pixel enters the row buffers and
the bottom row of the window. Row buffer k delays the stream by exactly
(k+1)·IMG_W steps, so it presents the pixel k+1 rows above the input. Window
row i is fed with the stream delayed by WIN-1-i rows. Each window row shifts
one place to the left per step. After a step, `win[i][j]` holds the pixel at
row offset i-HALF and column offset j-HALF from the window centre, where
HALF = (WIN-1)/2.

The centre pixel entered DELAY = HALF·IMG_W + HALF steps earlier. A window
centred on a pixel therefore exists only once DELAY more pixels have arrived.
This lag is the *priming* that every frame needs. At the end of a frame the
same lag must be paid again to get the last outputs out (*flushing*).

Each row buffer is a memory of IMG_W words with one shared circular pointer.
In a step, the word at the pointer is read (it is the pixel from one row
earlier) and overwritten, and the pointer moves on. The pointer is not tied to
image columns: only the length of the delay matters.

## Borders without stalling

This is the least obvious part of the design.

Near an image edge, part of the window lies outside the image. The pipeline
does not stop at row ends or frame ends. So those window positions are not
empty: they hold real pixels from the wrong place. This may be the end of the
previous row, the start of the next row, the last rows of the previous frame,
or the first rows of the next frame. The next frame's first rows arrive while
the current frame's last rows are still being output: the priming of one
frame overlaps the flushing of the other.

`border_manager` replaces every such pixel. It takes the centre's row and
column and, separately for each window row and each window column, works out
where the pixel to use really is (`filter_pkg::border_map`):

| `border_mode` | outside index -1, -2 maps to | at the far edge n, n+1 maps to |
|---|---|---|
| `BORDER_CONST` (0) | constant `border_const` | constant |
| `BORDER_REPLICATE` (1) | 0, 0 | n-1, n-1 |
| `BORDER_MIRROR_DUP` (2), mirror with duplication | 0, 1 | n-1, n-2 |
| `BORDER_MIRROR` (3), mirror without duplication | 1, 2 | n-2, n-3 |

For all four policies, the replacement is either the constant or a pixel
HALF or fewer rows and columns from the centre. That pixel is in the same raw
window. So the replacement is just a row multiplexer and then a column
multiplexer in front of the multipliers. No extra pixel store is needed, and
no step has to wait. Rows and columns are treated independently, which also
handles the corners.

The mirror policies need the image to be at least HALF+1 pixels in each
direction. Pixels outside the image are never used, so the random contents of
the row buffers and window after power-up never reach the output.

## Control

`control_unit` has three states:

* **IDLE**: nothing in flight. A pixel is accepted only while `enable` is
  high. The first accepted pixel starts a frame.
* **STREAM**: one pixel is accepted whenever `in_valid` is high
  (`in_ready` = 1). The first DELAY steps of a stream only fill the window.
  After that, every step releases one window and so one output. When the last
  pixel of a frame arrives with `enable` high, the next frame simply follows.
  Nothing stalls, and the previous frame's last DELAY outputs come out while
  the new frame primes.
* **FLUSH**: entered when the last pixel of a frame arrives with `enable` low
  (deactivation). `in_ready` drops. The unit steps on its own for DELAY cycles
  to push out the rest of the frame, then returns to IDLE.

So `enable` is sampled at frame boundaries. Dropping it in mid-frame takes
effect at the end of that frame. With `enable` held high, a gap between frames
holds the last outputs of a frame until the next frame's pixels push them out.
Gaps inside a frame (`in_valid` low) simply pause the stream.

`border_mode` and `border_const` are captured with the first pixel of each
frame and stay with that frame's outputs. A new policy therefore takes effect
cleanly at the next frame, even though frames overlap in the pipeline.

The control unit also counts the output position and attaches frame markers
(`sof`, `eol`, `eof`). The markers travel through the arithmetic pipeline with
the data.

## Arithmetic and timing

* Pixels are unsigned `PIX_W` bits. Coefficients are signed `COEF_W` bits.
  Products are signed `PIX_W+COEF_W` bits (23). The sum is signed
  `PIX_W+COEF_W+$clog2(WIN*WIN)` bits (29) and cannot overflow. `out_pixel` is
  this full-precision sum. Any fixed-point scaling, rounding or clipping to a
  pixel is left to the user. For example, coefficients with F fractional bits
  give a result with F fractional bits.
* Coefficient k = i·WIN + j is applied to the pixel at row offset i-HALF and
  column offset j-HALF (row-major, top-left first). This is correlation order.
  For a true convolution, load the kernel rotated by 180°. A write
  (`coef_we`, `coef_addr`, `coef_wdata`) is visible from the next cycle and
  applies to any pixel still in the multipliers. Reload coefficients between
  frames, or accept one mixed frame. Smaller kernels (5 x 5, 3 x 3) are loaded
  with the outer coefficients set to zero.
* Multipliers: 3 register stages (input, multiply, output), the way a DSP
  slice is used with all its pipeline registers on. The border multiplexers sit
  in front of the input register.
* Adder tree: ceil(log2(WIN·WIN)) levels of 2-input adders with a register
  after each. For 49 operands that is 6 levels and 48 adders. At a level with
  an odd number of operands, the odd one is only registered.

Latency, from a pixel presented at the input to its filtered value at the
output, with an unbroken stream:

    LATENCY = HALF·IMG_W + (WIN+1)/2 + 3 + ceil(log2(WIN·WIN))

| WIN | IMG_W | latency (cycles) |
|---|---|---|
| 7 | 100 | 313 |
| 7 | 640 | 1933 |
| 7 | 1920 | 5773 |

Throughput is one pixel per clock. A 640 x 480 frame takes 307 200 cycles.

## Top-level interface (`spatial_filter_top`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `enable` | in | 1 | activation; sampled at frame ends (see Control) |
| `border_mode` | in | 2 | `border_mode_e`, captured with each frame's first pixel |
| `border_const` | in | PIX_W | constant for `BORDER_CONST` |
| `coef_we`, `coef_addr`, `coef_wdata` | in | 1, 6, COEF_W | coefficient write |
| `in_valid`, `in_ready`, `in_pixel` | in/out/in | 1, 1, PIX_W | input stream; a pixel moves when both valid and ready are high |
| `out_valid`, `out_pixel` | out | 1, 29 | output stream; no back-pressure |
| `out_sof`, `out_eol`, `out_eof` | out | 1 each | first pixel of frame, last of row, last of frame |
| `busy` | out | 1 | filter not idle |

Parameters: `WIN` (odd, default 7), `PIX_W` (8), `COEF_W` (15), `IMG_W` (640),
`IMG_H` (480). Image size is fixed at elaboration. Storage is
(WIN-1)·IMG_W·PIX_W bits of row buffer (30 720 bits by default), plus
WIN²·PIX_W window bits and WIN²·COEF_W coefficient bits.

## Simulation

Every testbench checks itself and ends with a `TB_RESULT checks=N failures=M`
line. Build any of them with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/filter_pkg.sv tb/filter_ref_pkg.sv \
  rtl/coef_file.sv rtl/row_buffers.sv rtl/window_cache.sv rtl/border_manager.sv \
  rtl/multiplier_array.sv rtl/adder_tree.sv rtl/control_unit.sv rtl/spatial_filter_top.sv \
  tb/tb_spatial_filter_top.sv --top-module tb_spatial_filter_top
./obj_dir/Vtb_spatial_filter_top
```

| Testbench | What it shows |
|---|---|
| `tb_spatial_filter_top` | 12 x 9 frames through the whole filter: all four border policies, policy changes between back-to-back frames, input gaps, deactivation with flush and refused input, coefficient reloads (3 x 3 and 5 x 5 kernels in the 7 x 7), frame markers and latency. It counts each mechanism and fails if one never happened. |
| `tb_spatial_filter_full` | default build: two 640 x 480 frames back to back, then a flush; all 614 400 outputs compared; latency 1933 |
| `tb_spatial_filter_workloads` | one full frame at 100 x 100 (latency 313) and at 1920 x 1080 (latency 5773) |
| `tb_coef_file`, `tb_row_buffers`, `tb_window_cache`, `tb_border_manager`, `tb_multiplier_array`, `tb_adder_tree`, `tb_control_unit` | each block against its own model |

The golden model (`tb/filter_ref_pkg.sv`) computes every output pixel straight
from the whole frame. It mirrors or clamps source coordinates itself, apart
from the window logic in the hardware. `tb/wl_frame_runner.sv` is a helper
that runs one frame of a given size.

## Departures and own choices

Taken from the published architecture: the block structure, the 7 x 7 / 8-bit /
640 x 480 sizes, a 3-cycle multiplier, one-cycle fabric adders, the four border
policies, border handling by multiplexers without stalling, and the latency
formula. The simulated latencies equal the published ones for the fabric-adder
direct form (313 cycles for a 100-pixel row, 1933 for 640).

Choices made here, because the description does not cover them:

* **Coefficient width 15 bits, signed.** This is inferred from the reported
  735 coefficient-file registers (49 x 15). The reset value is zero, and
  writes take effect at once.
* **Border replacement from the raw window.** The published scheme uses extra
  temporary pixel registers inside the window cache, and its inner workings
  are not given. This design picks each replacement directly from the raw
  window through multiplexers. It still needs no stalls and no extra row
  buffers. Register counts will differ from the published figures.
* **Adder tree depth.** The published adder table lists 5 stages for a
  7 x 7 window. The published latencies need 6, and a 49-input binary tree has
  6 levels. 6 is built.
* **Window registers.** The full WIN x WIN window is registered. The
  published register count suggests one position may be taken straight from
  the input. This would shift the latency, and the latency built here matches
  the published one.
* The valid/ready input, the `enable` protocol, the FLUSH state, per-frame
  capture of the border policy, the frame markers and the full-precision
  output with no rounding are all this design's own.
* Not built: the transposed-form filter and the adder trees made of DSP48E1
  slices (plain and with a 6:3 compressor). These are alternatives in the same
  study, and the DSP48E1 is a vendor primitive. Clock frequency and FPGA
  resource use can only be judged after synthesis on a target device.
