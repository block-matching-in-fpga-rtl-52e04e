# Stream-based block matching for BM3D

BM3D denoising starts by *block matching*: for every reference block of the
image it looks, inside a search window centred on the block, for the blocks
that are most similar to it, measured by the sum of squared pixel
differences. Done block by block, each reference block re-reads its whole
window, which gives two-dimensional, poorly localised memory accesses.

This RTL implements the stream-based alternative described in
R. Pizarro and M. Pleskowicz, *Block-matching in FPGA* (EPFL). It swaps the
two loops. Fix one displacement (dy, dx). One pass over the frame then gives
the distance between *every* block and the block displaced by (dy, dx). Each
pixel is paired with the pixel dy rows up and dx columns left, giving a
*differential image* of squared differences. A sliding summed-area unit
turns that image into a *sum table*: one block distance per block position.
Repeat for every displacement of the search window. NWORK workers handle
NWORK displacements in the same pass. The frame is read purely row by row,
and every buffer is a line buffer.

The configuration by default is the one the paper synthesised: a
720 x 1280 frame (720p transposed, so rows are 720 pixels), a 32 x 32
search window, 8 x 8 blocks and 4 workers.

## Offsets and passes

The distance is symmetric: block P against block Q equals Q against P. So
only the upper half of the window is swept. For `WIN = 32`:

| window row | dy (rows up) | dx (columns left) | passes with 4 workers |
|---|---|---|---|
| 0 .. 15 | 16 .. 1 | 16 .. -15 (all 32 columns) | 8 per row, 128 in all |
| 16 (centre row) | 0 | 16 .. 1 (left half) | 4 |

That gives `NPASS = (WIN/2)*(WIN/NWORK) + WIN/(2*NWORK)` passes, 132 by
default. The sweep starts at the top-left corner of the window. In pass `p`,
worker `k` covers window column `wx = (p mod (WIN/NWORK))*NWORK + k` of
window row `wy = p div (WIN/NWORK)`. Its offset is `dy = WIN/2 - wy` and
`dx = WIN/2 - wx`. After the last column group of a window row the sweep
jumps to the first column of the next row. The centre offset itself
(distance zero) is not produced. The distance for a displacement below the
centre, or to the right of the centre in the centre row, is the sum-table
entry of the opposite offset at the other block's position.

`WIN/2` must be a multiple of `NWORK`, and this is checked at elaboration.
The frame has to be streamed `NPASS` times per image.
`offset_sequencer` counts pixel positions and passes. For each pass it
gives the pixel-buffer read distance `dmin = dy*IMG_W + dx0 - (NWORK-1)`,
where `dx0` is worker 0's dx.

## Square-difference stage (`diff_square`)

Every incoming pixel is written into a circular buffer of
`(WIN/2)*IMG_W + WIN/2` pixels (11,536 by default). That is just enough to
reach the window corner, 16 rows and 16 columns back. Per pixel, one read
at distance `dmin` gives the paired pixel of the last worker. A shift
register of earlier reads supplies the other workers, each one column
further left. All workers therefore share the same current pixel and stay
in lock step.

Near the frame borders some offsets would point outside the frame. The
stage passes on only pixels for which every offset is inside:

- rows `WIN/2 .. IMG_H-1`;
- columns `WIN/2 .. IMG_W-WIN/2-1`.

So every differential image, and every sum table, is
`(IMG_H - WIN/2) x (IMG_W - WIN)` = 1264 x 688 by default. Coordinates in
that table start at 0.

## Sliding block sums (`sum_worker`)

A worker receives one differential image `D` in raster order. For every
position it outputs the `BLK x BLK` block sum whose bottom-right corner is
the current pixel:

    S(r,c) = S(r-1,c) + S(r,c-1) - S(r-1,c-1)
           + D(r,c) - D(r-BLK,c) - D(r,c-BLK) + D(r-BLK,c-BLK)

Each of these terms comes from a small store:

| term | store |
|---|---|
| `D(r-BLK,c)` | pixel buffer, `BLK` rows of the differential image (`BLK*(IMG_W-WIN)` x 18 bit) |
| `S(r-1,c)` | sum buffer, one row (`IMG_W-WIN` x 32 bit) |
| `D(r,c-BLK)`, `D(r-BLK,c-BLK)` | `BLK`-deep shift registers |

Terms that do not exist yet count as zero: the row above row 0, and pixels
left of column 0. The first `BLK-1` rows and columns of a table therefore
hold partial sums of the part of the block inside the table. `s_full` /
`sum_full` marks the complete blocks.

Computed as written, the recurrence puts six additions in the
cycle-to-cycle loop, which limits the clock. The terms are regrouped so that
everything except the running value is formed before it is needed:

    up   = S(r-1,c) - D(r-BLK,c)           read and combined one cycle early
    left = S(r,c-1) - S(r-1,c-1)           kept from the previous cycle
    diag = D(r-BLK,c-BLK) - D(r,c-BLK)     from the shift registers
    S(r,c)    = left + up + D(r,c) + diag
    left_next = left + D(r,c) + diag - D(r-BLK,c)

The worker has three stages: buffer read, pre-combination, accumulation.
It takes one pixel per clock and outputs its sum 3 cycles later.

## What leaves the engine (`bm_stream_top`)

`bm_stream_top` chains the sequencer, the square-difference stage, `NWORK`
workers and the stride gate. Each valid cycle it outputs one sum-table
position `(sum_row, sum_col)` with `NWORK` sums:

- `sum_data[k]` is the distance between two blocks. The first block has
  its bottom-right pixel at image position `(sum_row + WIN/2, sum_col + WIN/2)`.
  The second is the same block moved `sum_dy` rows up and `sum_dx[k]`
  columns left.
- `sum_pass` gives the pass.
- `sum_full` marks complete blocks.

A sum appears 5 cycles after the pixel that completes its block.
`frame_done` and `all_done` pulse after each pass and after the last one.
`row_jump` is high during the last pass of a window row.

The candidates of one reference block are spread over the same position
of every sum table, across all passes. Reordering them per reference block
needs the sum tables in external memory, followed by a reordering network.
Neither is part of this RTL: the engine's sum outputs are where the memory
connects. The reordered stream comes back in on the `cand_*` ports.

### Stride (`sum_stride`)

Selecting the best candidates costs more than one cycle per candidate in
an optimal sequential implementation. It can be matched by keeping only
one sum in `STRIDE` along each row. `STRIDE = 1`, the default, keeps every
sum. Larger values divide the sum rate and the sum-table memory by `STRIDE`.

### N best (`pick_n_best`)

For one reference block (`cand_first` .. `cand_last`), the stage keeps the
`NBEST` candidates with the smallest distance. Only candidates with a
distance of at most `threshold` count. The threshold is BM3D's τ times
`BLK^2`, because the sums are not normalised. The list is held sorted in
registers. Each entry compares itself with the newcomer in parallel and
then keeps its value, takes the newcomer, or takes its neighbour's value.
One candidate is accepted per clock. `best_valid` pulses one cycle after
`cand_last`, with the list (`best_dist`/`best_tag`, closest first) and
`best_count`. Ties keep arrival order.

## Parameters

| parameter | default | meaning | origin |
|---|---|---|---|
| `IMG_W`, `IMG_H` | 720, 1280 | frame width (pixels per row) and height | paper |
| `WIN` | 32 | search window size | paper |
| `BLK` | 8 | block size | paper |
| `NWORK` | 4 | parallel workers (offsets per pass) | paper (16 in its throughput estimate) |
| `SQ_W`, `SUM_W` | 18, 32 | squared-difference and sum widths | paper's adder widths |
| `PIX_W` | 8 | pixel width | this design |
| `STRIDE` | 1 | keep one sum in `STRIDE` | this design (paper gives no value) |
| `NBEST` | 16 | size of the best-candidate list | this design (usual BM3D value) |

The defaults live in `bm_pkg`. Memory with the defaults:

- 92,288 bits in the square-difference buffer;
- 121,088 bits per worker;
- 576,640 bits in all.

One image takes 132 passes of 921,600 pixels, which is 0.49 s at 250 MHz.
With `NWORK = 16` it takes 33 passes, 0.12 s.

## Where this departs from the paper, and how far to trust it

- The paper builds the pipeline up to the sum tables. The stride and N-best
  stages are only recommended there, without a design. The versions here
  are the simplest that do the described job.
- The paper does not list the set of offsets. The half-window sweep above
  is this design's reading of its buffer sizes, its output size
  (`height - WIN/2` by `width - WIN`) and its "from the corner to the
  centre" order. Offsets in the pixel's own row are covered only through
  the centre-row passes.
- The paper says only valid sums are written back, but also that
  unavailable terms count as zero. This design outputs every position,
  including partial edge sums, and flags the complete ones.
- Pixel width, reset (asynchronous active-low, control registers only) and
  the absence of back-pressure are this design's choices. The input may
  have gaps. It must not drop pixels, because positions are counted.
- The buffers are plain arrays with synchronous read. Whether they map to
  block RAM is left to synthesis. The paper reports 2 block RAMs for the
  square-difference stage and 3 per worker. The arrays here hold 92 kbit
  and 121 kbit, which is in line with those counts.
- The paper also suggests a variant with no square-difference buffer: it
  reads the frame twice in parallel from external memory, once at the
  offset. That variant is not built here.

Every block has a self-checking testbench that compares it with a model
built from the definitions, not from the RTL:

- direct summation of the block sums;
- direct squared differences at each offset;
- a stable sort for the N best.

The testbenches also check cycle latencies. `tb_bm_stream_top` runs a
reduced engine (24 x 14 frame, window 8, block 3, 4 workers, stride 2)
through a whole image with random gaps. It then acts as the external
sum-table memory to feed the N-best stage. `tb_bm_stream_full` runs the
default configuration through all 132 passes on the ramp image
`I(i,j) = j mod 256` and checks every sum against a closed form. It
simulates in about a minute. It also checks that the image takes exactly
132 x 720 x 1280 clocks. `tb_bm_stream_16ch` runs the 16-worker
configuration (window 32, block 8) on a small random frame. It checks every
sum and that the 33 passes take one clock per pixel.

## Simulating

Every file holds one module or package and is named after it. With
Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl rtl/bm_pkg.sv \
        tb/tb_bm_stream_top.sv --top-module tb_bm_stream_top -o sim
    ./obj_dir/sim

Each testbench ends by printing `TB_RESULT checks=N failures=M`. The other
testbenches are `tb_offset_sequencer`, `tb_diff_square`, `tb_sum_worker`,
`tb_sum_stride`, `tb_pick_n_best`, `tb_bm_stream_16ch` and
`tb_bm_stream_full`. They build the
same way.

| file | contents |
|---|---|
| `rtl/bm_pkg.sv` | default parameters, pass/offset helper functions |
| `rtl/offset_sequencer.sv` | pixel position, pass counter, offset stepping |
| `rtl/diff_square.sv` | pixel buffer, worker shift register, squared differences |
| `rtl/sum_worker.sv` | sliding summed-area block sums |
| `rtl/sum_stride.sv` | stride gate on the sum stream |
| `rtl/pick_n_best.sv` | sorted N-best candidate list |
| `rtl/bm_stream_top.sv` | the engine |
