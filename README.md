# A localization accelerator in SystemVerilog

An autonomous machine (a car, a drone) has to know where it is. It does this with a
vision frontend and a state-estimation backend. The frontend turns each stereo camera
frame into key-point correspondences. There are two kinds: between the left and right
images of a frame (stereo), and between consecutive left frames (temporal). The backend
is a registration, VIO (Kalman filter) or SLAM solver that turns those correspondences
into a pose.

The frontend costs about the same in every operating mode, so it is accelerated as a
fixed pipeline. In the backend, a few matrix kernels dominate both the latency and its
variation:

- camera-model projection for registration;
- the Kalman gain for VIO;
- marginalization for SLAM.

These kernels share a small set of matrix primitives. The backend is therefore built as
a set of matrix units that the host programs with commands.

This RTL describes the whole accelerator at the size of the car configuration:
1280 x 720 stereo frames and 256 x 256 matrices. The two halves share no datapath. The
host moves data between them.

```
             camera stream (left, then right image)       second read of both images
                          |                                          |
              +-----------v-----------+                    +---------v--------+
              | feature extraction    |  features (both)   | disparity refine |--> stereo matches
              |  FD + IF -> KP FIFO   |------------------->|   (DR, SAD)      |
              |        -> FC          |   MO (Hamming,     +------------------+
              +-----------+-----------+   2 banks) -> FIFO ----^
                          | filtered left image + left key points with patches
              +-----------v-----------+
              | temporal matching     |--> optical flow of the previous frame's key points
              |  DC + LSS (Lucas-Kanade)
              +-----------------------+

  host <-> backend: 4 scratchpads (256x256 Q16.16) + MULT, TRANS, DECOMP, SUBST, INV, ADD/SUB
```

## Frontend

### Pixel streams and stencil buffers

Every image operation in the frontend is a stencil: a window of pixels around a centre,
moved over the image in raster order. The stencil buffer (`stencil_buffer`) serves them
all:

- LINES line FIFOs are connected in a cascade. Each holds one image line of W pixels.
  Each cycle, every FIFO pops one pixel at the current column into the next FIFO.
- Shift registers take the FIFO outputs and form the windows.
- Window A spans all lines. Window B spans only the B_ROWS oldest lines. Two operations
  with different window heights can therefore share one buffer.

The defaults (4 FIFOs, a 4 x 3 and a 3 x 3 window) are the example configuration.

Timing rule: after the push of pixel (r, c), `win_a[i][j]` holds pixel
(r - LINES + i, c - A_COLS + 1 + j). Every consumer computes its window centre from
`out_row`/`out_col` with that rule. Windows that cross the left edge of the image hold
the end of the previous line. Consumers treat such positions as outside the image.

Image width is a parameter (W = 1280). The figure of the SB design prints 4 x 1920 line
FIFOs. The text gives 1280 x 720 as the image size, and W follows the text.

Nothing is kept on chip for the whole frame. Disparity refinement needs the same raw
pixels that feature extraction used, but far later. Instead of buffering them, the image
pair is read from memory a second time into DR's own small stencil buffers (pixel
replication).

### Feature extraction (`feature_extraction`)

The block processes the left image and then the right image with the same hardware, one
pixel per cycle.

1. A 7-line stencil buffer feeds two operations at once:
   - FAST-9 corner detection (`fast_detect`), on its 7 x 7 window A.
   - A 5 x 5 binomial Gaussian filter (`gauss_filter`), on its 5 x 5 window B.
2. Corners enter a key-point FIFO in raster order.
3. The filtered image streams into a 31-line stencil buffer. When its window centre
   reaches the key point at the head of the FIFO, `orb_desc` computes:
   - a 256-bit binary descriptor from 256 pixel-pair intensity tests in the 31 x 31 window;
   - an 11 x 11 patch for optical flow.

   A key point the window has already passed is dropped.
4. After each image, the block pushes 22 zero lines itself. These flush the last key
   points out before the next image starts. A new image is accepted only after
   `frame_done` of the previous one.

The FAST threshold is 20 and the key-point border is 16. Corner candidates are not
thinned by non-maximum suppression.

The descriptor is BRIEF-like. Its 256 test pairs come from a fixed linear congruential
sequence:

```
s  = s * 1103515245 + 12345 (mod 2^31)
offset = ((s >> 16) mod 27) - 13
```

The offsets are taken in the order r1, c1, r2, c2. No orientation steering is applied.

### Stereo matching: MO and DR

**Matching optimization (`hamming_match`).** MO collects both images' features. For each
left feature, it examines all right features, one per cycle. A candidate must satisfy
both:

- its row is within ±2 of the left row;
- its disparity xl - xr is in [0, 64].

The candidate with the smallest Hamming distance wins if that distance is at most 100.

MO keeps two banks of features. Feature extraction fills one bank with frame t+1 while
MO searches frame t in the other. This double buffering is how feature extraction and
stereo matching overlap across frames. When both banks are busy, the next left image
waits (`fe_stall`).

**Disparity refinement (`disparity_refine`).** DR receives the left and right images
again, in lockstep.

- Its left stencil buffer gives a 7 x 7 block.
- Its right stencil buffer gives a 7 x 71 window, which covers every disparity 0..64.
- When the left centre reaches a match (x, y, d0), the SAD of d0-2 .. d0+2 is computed
  in that cycle. The smallest SAD wins.

The frontend queues how many matches each frame has. DR therefore takes only its own
frame's matches from the shared match FIFO, even when MO is frames ahead.

### Temporal matching (`temporal_match`, `lk_solver`)

Left key points and their 11 x 11 patches wait in a FIFO until the next left frame
arrives.

**Derivative calculation.** While the next filtered left image streams through a 9-line
stencil buffer, each point's 9 x 9 neighbourhood yields:

- Ix and Iy, by central differences on the stored patch;
- It = current - previous.

From these it accumulates gxx, gxy, gyy, bx and by.

**Least-squares solver.** `lk_solver` solves G d = -b by Cramer's rule and outputs the
flow in Q8.8 pixels.

This is one Lucas-Kanade iteration on one pyramid level. It is accurate for motions of
around a pixel. Iterations and image pyramids are not built.

## Backend (`backend`)

### Storage and commands

Four scratchpads (`spm`) each hold one 256 x 256 Q16.16 matrix, row-major with row stride
256. The host loads operands through the host port. It then issues commands of the form
`{op, src_a, src_b, dst, m, k, n, trans_b}`. One command runs at a time, and the
destination must differ from both sources.

| op | unit | computes | cycles (approx.) |
|----|------|----------|------------------|
| MULT | `be_mult` | C = A B or A B^T. A 4 x 4 outer-product array per output tile. | tiles(m)·tiles(n)·(6k+17) |
| TRANS | `be_transpose` | C = A^T | m·n + 2 |
| DECOMP | `be_decomp` | S = L D L^T, packed with D on the diagonal and L below it | ~n³/6 MACs |
| SUBST | `be_subst` | Solves L D L^T X = B (forward, diagonal and backward substitution) | ~n² per column |
| INV | `be_inverse` | Inverse of [diag(A) B; B^T D], with D 6 x 6 | ~36·nd + n² |
| ADD/SUB | `be_misc` | C = A ± B | m·n + 2 |

Element-wise units walk the matrices through `agx`, which visits the elements in
4 x 4 tiles.

### Mapping the kernels to commands

**Kalman gain.** The gain is K = P H^T S^-1 with S = H P H^T + R. Because S is symmetric,
K^T solves S K^T = (P H^T)^T. The command sequence is:

1. MULT: T = P H^T.
2. MULT: S = H T.
3. ADD: S = S + R.
4. DECOMP: factor S.
5. TRANS: U = T^T.
6. SUBST: K^T = S^-1 U.

**Projection.** A single MULT of the 3 x 4 camera matrix by the 4 x M point matrix.

**Marginalization.** The inverted matrix has a diagonal upper-left block and a 6 x 6
lower-right block, so INV does not need general inversion hardware. It computes
reciprocals of the diagonal, a Schur complement, a 6 x 6 Gauss-Jordan inverse, and the
block formula for the rest.

### Numerics

All backend arithmetic is Q16.16 with 64-bit products. Accuracy is limited by this
format. The test matrices (entries of order 1, well conditioned) match a real-valued
reference within 1e-3 to 5e-3. Badly scaled covariance matrices would need rescaling by
the host.

## Top level and interfaces (`eudoxus_top`)

The top places the frontend and the backend side by side. Its ports are:

- `cam_*`: the first image stream. A left image, then a right image, each starting with
  `cam_sof`, with `cam_side` telling which is which.
- `dr_*`: the second, lockstep left/right read for DR.
- `st_*`: refined stereo matches.
- `fl_*`: optical flow results.
- `cmd_*` and `host_*`: the host's view of the backend.

All streams use valid/ready handshakes. Resets are asynchronous and active low.

Not built (outside the accelerator or not described):

- the host CPU and its software (the backend solvers and the mode-selecting runtime);
- DMA engines and the PCIe/AXI link;
- DRAM;
- sensors;
- the on-chip input double buffer in front of the frontend.

Those connections appear as the stream and host ports.

Parameters and their defaults:

| parameter | default | meaning |
|-----------|---------|---------|
| W, H | 1280, 720 | image size |
| MAX_FEAT | 1024 | features per image and bank (above 0.1% of 1280 x 720 pixels) |
| DMAX | 64 | largest disparity |
| NMAX | 256 | largest matrix dimension |
| BLK | 4 | multiplier tile size |

With the defaults, one stereo frame takes about 1.9 M cycles of feature extraction and
0.93 M cycles of disparity refinement. The second overlaps the next frame's feature
extraction.

## Departures from the published design and open points

- **Algorithm parameters.** Threshold values, window sizes (FAST 7 x 7, Gaussian 5 x 5,
  descriptor 31 x 31, SAD 7 x 7, LK 9 x 9), the search radius and the number format are
  choices made here. The source gives only the algorithms' names.
- **ORB.** The descriptor pattern is generated, not the published ORB pattern, and there
  is no orientation.
- **Optical flow.** Single-iteration, single-level.
- **Memory type.** The backend scratchpads are plain arrays, and their size is fixed by
  NMAX. The sizes of the source's two configurations differ only in W/H and in the
  multiplier and scratchpad sizes.
- **Key-point order.** Key points must reach DR and TM in raster order. Within the
  frontend they always do.
- **MO throughput.** MO's exhaustive search takes (left features) x (right features + 3)
  cycles. This is about 1 M cycles at 1000 features per image. With very dense features
  it becomes the frontend's bottleneck.
- **Assertion reset.** Assertions use `disable iff (!rst_n)`. Verilator therefore reports
  rst_n as used both synchronously and asynchronously. This is expected.

## Simulation

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Run one with plain Verilator:

```
verilator --binary --timing --assert rtl/eudoxus_pkg.sv -y rtl -y tb tb/tb_backend.sv --top-module tb_backend
./obj_dir/Vtb_backend
```

What the testbenches cover:

- **Unit testbenches** compare against references computed in the testbench: brute-force
  FAST, filter, descriptor, Hamming search and SAD search; integer Lucas-Kanade; and
  real-valued matrix algebra.
- **`tb_frontend` and `tb_eudoxus_top`** run small (96 x 64) multi-frame stereo sequences
  end to end. They check that every mechanism occurs: features, matches, refinement to
  the true disparity, flow, FE/DR overlap across frames, FE stall on busy banks, and a
  backend command beside the frontend.
- **`tb_eudoxus_top_full`** runs the top with its default parameters: three 1280 x 720
  stereo frames and a 3 x 4 x 256 projection on the backend. It takes about two minutes
  in Verilator.
