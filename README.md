# iELAS stereo-matching accelerator: design appendix

This is a SystemVerilog model of iELAS, an FPGA accelerator for ELAS stereo
matching (Efficient Large-scale Stereo). iELAS replaces ELAS's irregular Delaunay
triangulation of scattered support points with two steps. First the support
points are interpolated onto a fixed grid. Then that regular lattice is
triangulated. All modules are synthesisable RTL on one clock with an
asynchronous active-low reset. At their default parameters they build the
640x480 configuration.

## Data flow

```
left/right pixels ─► sobel_filter x2 ─► desc_ram x2 (ping-pong, 5 row banks)
                                          │
               sp_controller (2 x support_point_extractor, L/R check)
                                          │
                              sdp_ram  "RAM_Support Point"
                       ┌──────────────────┴───────────────────┐
                  sp_filter ─► grid_vector ─► RAM_GRID    interpolator ─► delaunay_triangulator ─► mesh RAM
                       └──────────────────┬───────────────────┘
                      dense_matcher x2 (upper / lower half of the rows)
                                          │
                           8-bit disparity, two output lanes
```

`ielas_top` connects these blocks. The paper draws the same block set (its
overview and data-flow figures), with two support-point extractors and two
dense-matching units.

## Blocks

**sobel_filter (descriptor extractor).** Two line buffers, each W pixels long,
feed a 3x3 register bank. The unit computes the horizontal and vertical Sobel
responses and stores each as 8 bits: clamp(g/4 + 128). The first result comes
W+1 pixels after the first input, which is how the (w+1)-cycle figure in the
paper is read here. At the end of a frame the unit flushes for W+1 cycles with
`in_ready` low. Border pixels get the flat value 128.

**desc_ram (RAM_L / RAM_R).** Only the 8-bit du/dv pair of each pixel is
stored. This is the paper's memory saving: the 128-bit descriptor is assembled
when it is read, not stored.
- Rows are interleaved over five banks (row mod 5), so all five rows of a 5x5
  window can be read in the same cycle.
- There are two frame banks for ping-pong operation.
- Each read port returns the 16-byte descriptor one cycle after the request:
  12 du bytes and 4 dv bytes, at the window positions used by the ELAS
  software.
- Centres closer than 2 pixels to the border return `rok = 0`.

**support_point_extractor.** For one reference pixel it computes the SAD
between two descriptors for every disparity that stays inside the image, one
candidate per cycle. It returns the lowest cost; on a tie, the smaller
disparity wins. `DIR` selects the search direction, u-d or u+d.

**sp_controller.** There is one candidate at the centre of every 5x5 window,
so the support grid is W/5 x H/5.
- The left extractor finds d1.
- The right extractor repeats the search from the matched right-image pixel
  and finds d2.
- The point is kept only if |d1 - d2| <= LR_THR.
- The two extractors work as a two-stage pipeline on consecutive candidates.

**sdp_ram.** A block RAM with one write port and NRD synchronous read ports.
It is used for RAM_Support Point, RAM_GRID and the mesh store.

**sp_filter.** A 5x5 window slides over the support grid, built from four
line buffers and a register bank. It removes two kinds of point:
- Implausible points: fewer than 5 neighbours within ±5 disparity.
- Redundant points: the nearest valid neighbours on both sides of a row, or
  of a column, have the same disparity.

**grid_vector.** Each cell covers 4x4 support points.
- Every filtered point marks d-1, d and d+1 in a 256-bit flag word for its
  cell.
- A cell's list is the OR of its own flags and those of its 8 neighbouring
  cells.
- Up to DEPTH = 20 disparities are stored in ascending order. This limit is
  the paper's grid-vector optimisation.
- If a cell has more values than that, the highest are dropped and
  `overflow` pulses.

**interpolator.** Every vacant grid position gets a value from the first rule
that applies:
1. The nearest support points on its left and right both lie inside the open
   window (s - S_DELTA, s + S_DELTA). Their mean (rounded down) is used if
   they differ by at most EPS; otherwise their minimum is used.
2. The same rule with the nearest points above and below.
3. Otherwise the constant C.

Only extracted points are searched, not points filled in by interpolation.
The work is done in two passes over RAM_Support Point:
- Pass A runs in reverse order and records the nearest point to the right and
  below for every position.
- Pass B runs forwards and combines those with the nearest point to the left
  and above.

This replaces the paper's LB3/RB3, whose sizes the paper does not give.

**delaunay_triangulator.** The interpolated points form a regular square
lattice. Each square is split along its top-left to bottom-right diagonal.
For a square lattice this is a valid Delaunay triangulation, because all four
corners lie on one circle. The unit stores one mesh word per square: the
top-left disparity plus the x and y slopes of both triangles, in signed Q8.8.

**dense_matcher.** For every pixel it:
- evaluates the plane of the pixel's triangle, giving the prior mu;
- tries the cell's grid-vector list and mu-2..mu+2 as candidates;
- scores each candidate as SAD + PRIOR_W·|d - mu|;
- outputs the candidate with the lowest energy, or `out_ok = 0` if there is
  none.

Two instances split the rows between them.

**ielas_top.** The Sobel filters write frame i+1 into one bank while the back
end processes frame i from the other. If both banks hold unprocessed frames,
`in_ready` drops and the input stalls. The back-end stages of a frame run in
sequence:
1. support points;
2. filter and grid vector, in parallel with interpolation and triangulation;
3. dense matching.

`events` carries a one-cycle pulse for each internal mechanism, for
monitoring.

## Parameters

| name | default | from the paper? |
|---|---|---|
| W, H | 640, 480 | yes, New Tsukuba resolution |
| S | 5 | yes, "any 5x5 window" |
| D_NUM | 256 | yes, "all 256 disparity values" |
| DEPTH | 20 | yes, grid-vector optimisation |
| S_DELTA, EPS, C | 5, 3, 0 | only values given (worked example) |
| LR_THR, INCON_THR, INCON_MIN, REDUN_THR | 2, 5, 5, 0 | own (ELAS software values) |
| GC, SRADIUS, PRIOR_W | 4, 2, 4 | own |

S_DELTA is counted in support-grid steps.

## Timing

At 640x480 one frame takes about 5.07 million cycles in the back end. The
front end takes about 0.31 million cycles. Throughput is therefore limited by
the back end, at roughly 39 frames/s for a 200 MHz clock. The paper reports
higher frame rates than this.

The main costs in this model are:
- the support-point search: up to 256 candidates per grid point, twice;
- the serial candidate loop of dense matching: about 29 cycles per pixel per
  unit.

The paper does not describe either datapath at that level of detail.

## Memory and workloads

The VC707 board's XC7VX485T has 1030 BRAM36 blocks, or 37.1 Mbit.

- **New Tsukuba 640x480 (default parameters).** The descriptor RAMs hold
  2 banks x 2 images x 640·480 x 16 bit = 19.7 Mbit. The other memories add
  about 1.5 Mbit: support grid, scratch, flags, grid list and mesh. This fits.
- **KITTI 1242x375.** It fits as a parameter setting (W = 1242, H = 375), not
  at the defaults. The support grid is 248x75 with 62x19 cells. The memories
  come to 29.8 + about 2.5 = 32.3 Mbit. All widths derive from W and H. Image
  sizes that S does not divide were simulated at 83x42.

This model stores whole frames. The paper uses only 501.5 BRAMs (18 Mbit), so
it probably keeps a rolling window of rows. Its text does not say so.

## Where the paper is not followed or is unclear

- The interpolation example in the paper (8x8 grid, s_δ=5, ε=3, C=0) is
  reproduced exactly except for one cell: row 2, column 3 (counting from 0).
  The paper prints 26 there.
  - In that row, the only support point is in column 0, so no horizontal pair
    exists.
  - In column 3, the nearest points are 38 above (distance 2) and 46 below
    (distance 1). Their difference of 8 is larger than ε, so the rule gives
    min = 38.
  - The testbench checks that cell against the rule.
- Post-processing (gap interpolation, median filter) belongs only to the
  original ELAS flow and is not built.
- The FPGA board, clocking and video I/O are not built. Pixels enter and
  disparities leave through ports.
- The following are own choices, since the paper names them without
  specifying them:
  - dense matching uses a linear prior instead of ELAS's Gaussian;
  - the candidate set is the grid list plus a ±2 window;
  - the fixed triangulation diagonal;
  - the filter thresholds;
  - the back end runs its stages in sequence rather than with the finer
    overlap in the paper's timing figure.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Stimulus uses `$urandom`.
The testbenches compare against independent models:
- Sobel: a direct convolution.
- Descriptor RAM: a reference image store.
- Extractor: an exhaustive search.
- Filter, grid vector and interpolator: their rules, evaluated directly.
- Interpolator, additionally: the paper's worked example.
- Triangulator: plane re-evaluation at the corners.
- Dense matcher: a brute-force argmin with tie order.

`tb_ielas_top` runs three frames at 80x40 and checks the following:
- each frame produces all pixels;
- at least 85% are within ±1 of ground truth (100% were);
- every monitored mechanism occurs: stall, bank swap, L/R rejection, both
  filter removals, grid overflow, the three interpolation kinds, and a
  plane-prior win.

`tb_ielas_full` runs the top at its default parameters on one 640x480 frame.
In the last run, 155,255 of 157,425 interior pixels (98.6%) were within ±1.
`tb_ielas_kitti` runs the same scene at 1242x375 with only W and H changed.
There, 335,896 of 337,770 interior pixels (99.4%) were within ±1, and a frame
took 7.67 million cycles.

For each module, a deliberately broken copy was simulated against its
testbench. Every broken copy produced failures.

To simulate a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ielas_pkg.sv tb/tb_interpolator.sv --top-module tb_interpolator
./obj_dir/Vtb_interpolator +verilator+rand+reset+2
```
