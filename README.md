# A fully pipelined bilateral grid for streaming image denoising

A bilateral filter smooths an image but keeps its edges. Each output pixel is a mean of its
neighbours, weighted by distance in space and by difference in intensity. Computed directly,
the work per pixel grows with the square of the window radius. A *bilateral grid* avoids this.
It sorts the pixels into a coarse 3-D histogram over (row, column, intensity), blurs that
histogram with a tiny fixed kernel, and reads each output pixel back by interpolating the
blurred grid.

This RTL implements such a grid with a variable-sized window. The radius `r` is given on the
image, not on the grid. One grid cell covers an `r x r` block of pixels and a band of
intensities `r*sigma_r/sigma_s` wide. The blur on the grid is then always 3x3x3, with
`sigma_g = sigma_s / r`, so the logic stays the same size whatever `r` is. Only the memories grow.

The design accepts one 8-bit grayscale pixel per clock and delivers one filtered pixel per
clock. At the default 1920 x 1080, `r = 12`, `sigma_r = 70`, `sigma_s = 8`, a frame takes
2 129 330 clocks in simulation. That is about 100 frames/s at 214 MHz.

## The algorithm in integers

Let pixel `(ix, iy)` have value `f`. Its feature vector is
`p = (ix/r, iy/r, f*sigma_s/(r*sigma_r))`. The three stages are:

1. **Grid creation (GC).** For each pixel, `grid[round(p)] += (1, f)`. Each cell holds a pixel
   count and an intensity sum.
2. **Gaussian filter (GF).** For each cell `v`, `grid_f[v] = sum_w g(w)*sum[v-w] / sum_w
   g(w)*count[v-w]`, over the 27 neighbours `w` in {-1,0,1}^3. `g` is a Gaussian with
   `sigma_g = sigma_s/r`. An empty neighbourhood gives 0.
3. **Trilinear interpolation (TI).** The output is `round(sum of the 8 corners of floor(p),
   weight * grid_f)`, with the usual trilinear weights.

The grid is `gx x gy x gz = (h/r + 2) x (w/r + 2) x (255*sigma_s/(r*sigma_r) + 2)`, with integer
division. The defaults give 92 x 162 x 4.

Rounding sends exact halves up, so the first block of a row or column is `r - r/2` pixels
wide. A count needs `bits(r*r)` bits and a sum `bits(255*r*r)`.

There is no floating point anywhere:

- The 27 weights fall into four groups by squared distance (0, 1, 2, 3). Each group weight
  is a constant scaled by 2^10, computed at elaboration.
- A `grid_f` value is unsigned Q8.4 (12 bits).
- Interpolation coefficients are Q0.8.
- Every division by `r` or by `r*sigma_r/sigma_s` is a 256-entry or `r`-entry table, built at
  elaboration.

## Data layout

All cells of one (x, y) grid column are read and written together. That makes one memory word
per (x, y): `grid^2D(x, y)` holds `gz` pairs `{count, sum}`. Cell `gz-1` sits in the top bits,
with its count above its sum. `grid_f^2D(x, y)` holds `gz` Q8.4 values in the same order.

Only a few planes (x values) are live at once:

| store | planes kept | partitions | word at defaults | depth |
|---|---|---|---|---|
| `grid^2D` (bg_grid_mem) | 3 | plane x mod 3 | 4 x (8+16) = 96 bits | gy = 162 |
| `grid_f^2D` (bg_gridf_mem) | 2 | plane x mod 2 | 4 x 12 = 48 bits | 162 |
| line buffer `lb` (bg_lb) | - | FIFO | 8 bits | (2r + round(r/2)) x w = 57 600 |

Each partition is a two-port RAM (`bg_ram`). One port reads or writes and the other only reads,
both with a one-clock read. The partitioning ensures that no RAM sees more than two accesses in
a clock:

- The GC reads or writes one `grid^2D` partition per clock.
- Each time the GF loads a column, it reads the same word from all three partitions.
- The GF writes `grid_f^2D` while the TI reads both of its partitions.

## The macro pipeline and its interlocks

This is the part of the design that needs the most care. The three stages do not run one
after another: they overlap on different planes of the same frame.

```
 pixels -> GC ----> grid^2D (3 planes) ----> GF ----> grid_f^2D (2 planes) ----> TI -> pixels
           |  ^------- GC re-reads a column ---|                                 ^
           '---------------------- lb FIFO (input pixels) ----------------------'
```

While the GC fills grid plane `x`, the GF blurs plane `x-1` and the TI interpolates the image
rows that lie between `grid_f` planes `x-2` and `x-1`. The GC and the TI each handle one pixel
per clock. The GF handles one cell per clock and must produce `gy*gz` cells per plane.

The stages coordinate only through *progress counters*. Each counter is a (plane, column) pair
that says how far the stage has got:

| signal | from -> to | meaning | the receiver waits when |
|---|---|---|---|
| `fin_plane`, `fin_col` | GC -> GF | `grid^2D` columns that are final | the GF wants to load a column of plane x+1 that is not final yet |
| `gf_plane`, `gf_loaded` | GF -> GC | `grid^2D` columns the GF has loaded | storing plane x would overwrite a column of plane x-3 that GF(x-2) has not loaded yet: the GC drops `s_ready` |
| `done_plane`, `done_col` | GF -> TI | `grid_f^2D` columns written | the TI would load a column that is not yet written |
| `ti_row`, `ti_cols` | TI -> GF | columns the TI has loaded on its current row | writing plane x would overwrite a column of plane x-2 that the TI still needs on the last row of that cell row |

Each stage has its own counter and checks before it acts, so no stage needs to know how fast
the others run. When the GF is quick enough, none of these waits ever happens. The GF is quick
enough when

    gy * gz  <  2w - round(r/2) - r - (w mod r)

At the defaults, 648 < 3822.

When the condition fails, for example at `r = 4` with full HD (482 x 9 = 4338 against 3834),
the GC stalls the input stream until the GF has caught up. The frame then takes longer, but
the result stays the same.

The line buffer covers the distance between the GC and the TI. The TI starts on rows of cell
row `q` only after `grid_f` plane `q+1` exists, which needs grid plane `q+2`. At that point
the GC has read `2r + round(r/2)` rows past the TI. The FIFO holds exactly that many. When it
is full, the GC stalls as well.

Frames are not overlapped. When the GC has taken `w*h` pixels, the GF has written all `gx`
planes and the TI has sent its last pixel, `frame_done` pulses for one clock. All counters then
return to the start of a frame. A frame therefore takes about `(h + 2r + round(r/2)) * w`
clocks plus the pipeline fill, with no stall.

## Grid creation without read-modify-write

`grid += (1, f)` on a BRAM would need a read, an add and a write for every pixel. Within an
image row, though, the pixels of one grid column (x, y) arrive one after another, about `r` of
them. The GC therefore keeps the whole column `grid(x, y, *)` in a register, `grid_z`:

- At the first pixel of such a run, `grid_z` is loaded from `grid^2D`. On the first image row
  of a cell row it is cleared instead.
- Each pixel adds `(1, f)` to cell `L1[f]` of `grid_z`.
- At the last pixel, `grid_z` is written back.

The word for the *next* run is fetched at the first pixel of the current run. This keeps the
GC's port to one access per clock, but it means every run must be at least two pixels long. An
elaboration-time `$error` rejects sizes that break this, e.g. `r = 3` with `w = 1920`, whose
last run is one pixel. Every `r` from 4 to 16 at `w = 1920` is fine.

## Gaussian filter datapath

For plane `x`, the window `reg_GF` holds columns `y-1, y, y+1` of planes `x-1, x, x+1`. That is
nine `grid^2D` words. A *step* loads column `y+1` with one read of each partition, shifts the
window, and then produces the `gz` cells of column `y`, one per clock.

Per cell, the pipeline does the following:

1. Sum the 27 neighbours in four adder trees, one per distance group. Counts and sums run side
   by side.
2. Multiply each group by its weight and add the four groups.
3. Divide numerator by denominator with rounding. `bg_div` is a restoring divider, unrolled into
   one clock and registered.

The `gz` results of a column are packed into one word and written to `grid_f^2D`. A plane takes
`gy*gz + 1` clocks: one step per column plus one token step that loads the first column.

Neighbours outside the image's planes, its columns, or `z = 0 .. gz-1` count as empty.

## Trilinear interpolation

Image row `ix` lies between `grid_f` planes `floor(ix/r)` and `floor(ix/r)+1`. The window
`reg_TI` holds columns `Y0, Y0+1` of both planes. Column `Y0+1` is loaded each time `iy`
crosses a multiple of `r`. At the start of a row, column 0 is loaded at `iy = 0` and column 1
at `iy = 1`: the first pixel needs only column 0, so this saves a stall.

The four z-pairs are blended first. Then they are weighted by the x-y products and summed. The
result is rounded and clamped to 8 bits. From pop to `m_valid` takes four clocks. Output
backpressure (`m_ready` low) freezes the whole TI pipeline, and through the full line buffer it
eventually stalls the input too.

## Interface

`bg_top #(W, H, R, SR, SS)` has the following ports:

- `clk` and `rst_n` (asynchronous, active low).
- Input `s_valid / s_ready / s_data[7:0]`: raster order, one pixel per clock when `s_ready` is
  high.
- Output `m_valid / m_ready / m_data[7:0] / m_last`: `m_last` marks the frame's final pixel.
- `frame_done`: one clock, when the pipeline restarts for the next frame.

The two streams are meant for the two AXI-Stream channels of a DMA. They carry no `TLAST` on the
input and no `TUSER`: the design counts `W*H` pixels.

## Where this departs from, or adds to, the published design

- **Trilinear weights.** The published coefficient formula `x_i = |p - floor(p) - i|` would
  give the lower corner a weight of `frac` rather than `1 - frac`. That mirrors the
  interpolation, and it disagrees with the published datapath figure, which pairs corner 0 with
  `x1*y1`. Standard trilinear weights are used here.
- **Rounding of halves.** Halves round up. The published loop starts its counters at
  `r - round(r/2) - 1`, which for even `r` puts the half-way pixel in the lower cell. With that
  rule, a line buffer of `2r + round(r/2)` rows would be one row short.
- **Control.** The published description gives the schedule (which plane each stage works on)
  but not the control. The progress counters and the two back-pressure interlocks are this
  design's own.
- **Invented details.** The following are not published: the fixed-point widths (2^10 weights,
  Q8.4 grid values, Q0.8 coefficients), the one-clock divider, reset, the stream handshake, the
  `frame_done` restart, and the one-column prefetch in the GC (with its two-pixel minimum run).
- **Ownership of the whole frame.** The design owns the whole frame and does not overlap
  frames. The published loop also runs `h + 2r + round(r/2)` row times per frame.
- **Not included.** The DMA, the AXI bus and the DRAM around the filter are not part of this
  RTL. Nor are the published Vivado resource figures.

## How far it has been checked

Every block has a self-checking testbench. Each one compares against values worked out
independently, either a shadow model or the `bg_ref` class in `tb/bg_ref_pkg.sv`. `bg_ref` is
a plain, bit-exact software version of the three stages using the same fixed-point rules.

- **`tb_bg_full`** runs one 1920 x 1080 frame at the default parameters.
  - Every one of the 2 073 600 pixels matches `bg_ref`.
  - The input is never stalled.
  - The frame stays within `(h + 2r + round(r/2)) * w` clocks.
- **`tb_bg_top`** runs two small configurations.
  - 64 x 48 at `r = 4` runs two frames with random output backpressure. The GC stalls, the TI
    waits and the frame restarts all occur and are counted.
  - `r = 8` runs with no stall and within its cycle bound.
- **`tb_bg_table1`** runs full HD at `r = 4, 8, 16`. All pixels match in each case.
- **`tb_bg_quality`** runs full HD at settings from the quality sweep: `r = 7` with
  `sigma_s = 4, sigma_r = 50`, `r = 5` with the same sigmas, and `r = 7` with `sigma_s = 10`.
  These cover odd radii and deeper grids (`gz` up to 9). All pixels match, with no stalls and
  within the cycle bound.

| r | input stalls | clocks / frame | fps at 214 MHz |
|---|---|---|---|
| 4 | 136 087 | 2 232 311 | 95.86 |
| 8 | 0 | 2 110 122 | 101.42 |
| 12 | 0 | 2 129 330 | 100.50 |
| 16 | 0 | 2 148 534 | 99.60 |

The frame rates published for the board, including DMA overhead, are 95.15, 100.13, 99.24 and
98.36. At `r = 4` the slowdown relative to `r = 8` is 5.5 % here, against 5.0 % published.

The reference shares the fixed-point conventions with the RTL, so it checks the datapath and
the scheduling but not the choice of conventions. Denoising quality (MSSIM against a clean
photograph) has not been measured.

## Files

| file | contents |
|---|---|
| `rtl/bg_pkg.sv` | grid sizes, widths, rounding, Gaussian weights, fixed-point constants |
| `rtl/bg_top.sv` | the whole filter |
| `rtl/bg_gc.sv`, `bg_gf.sv`, `bg_ti.sv` | the three stages |
| `rtl/bg_div.sv` | rounding divider of the GF |
| `rtl/bg_grid_mem.sv`, `bg_gridf_mem.sv`, `bg_ram.sv` | partitioned grid memories, generic RAM |
| `rtl/bg_lb.sv` | line buffer FIFO |
| `tb/bg_ref_pkg.sv` | bit-exact reference model |
| `tb/tb_*.sv`, `tb/bg_frame_run.sv` | testbenches, one frame runner |

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
RTL="rtl/bg_pkg.sv rtl/bg_ram.sv rtl/bg_div.sv rtl/bg_gc.sv rtl/bg_gf.sv rtl/bg_ti.sv \
     rtl/bg_lb.sv rtl/bg_grid_mem.sv rtl/bg_gridf_mem.sv rtl/bg_top.sv"
verilator --binary --timing --top-module tb_bg_full $RTL tb/bg_ref_pkg.sv tb/tb_bg_full.sv
./obj_dir/Vtb_bg_full
```

For the sweeps, add `tb/bg_frame_run.sv` and `tb/tb_bg_table1.sv` (or `tb/tb_bg_quality.sv`),
and name that module with `--top-module`.
Each testbench ends with a line `TB_RESULT checks=N failures=M`. A full-HD frame simulates in a
few seconds.

## Changing the parameters

`W, H, R, SR, SS` are elaboration parameters. Every size, table and weight follows from them.
Some limits apply:

- `R >= 2`.
- Every run of pixels in a grid column must be at least two pixels long.
- Widths are sized for 8-bit pixels.

Other `r` or sigma values need a new elaboration. The design has no run-time registers.
