# Navion-style visual-inertial odometry accelerator: memory-centric RTL

A visual-inertial odometry (VIO) engine estimates where a camera is and what the
scene around it looks like. It does this from a stereo camera and an inertial
sensor. On a nano drone the whole job must run on one chip, and the chip must
draw only a few milliwatts. The main cost is not arithmetic but memory:
- four 752x480 frames for tracking and stereo matching;
- the observations of thousands of feature tracks over a 20-keyframe window;
- a 300x300 double-precision linear system solved at every keyframe.

This RTL is built around three ideas that shrink that memory and keep the chip
on-die:

1. **Compressed frames.** Every frame is stored at 26 bits per 4x4 block instead
   of 128 bits. That is 4.9x smaller, and tracking and stereo matching read the
   frames directly in this form.
2. **Two-stage feature-track memory.** A sparse table of short pointers
   replaces a flat table of observations. The pointers lead into a dense pool
   sized for the observations that can actually exist at once.
3. **Sparsity-aware linear solver memory.** Only the entries of the symmetric
   system matrix that can be non-zero are stored. The Cholesky solver visits
   only those entries and writes its factor over them.

Around these ideas sit the datapaths that use them:
- the frame compressor;
- Shi-Tomasi feature detection;
- stereo template matching;
- the list of tracked features;
- the backend's double-precision units (including a sine/cosine unit) and its
  shared register file;
- the inertial measurement input, which turns single-precision bus words into
  doubles.

`navion_top` wires all of them together in two clock domains. The frontend
runs on `clk_vfe` (62.5 MHz in the reference chip) and the backend on `clk_be`
(83.3 MHz).

The chip also has an optical-flow tracker, undistortion and rectification,
RANSAC outlier rejection, IMU preintegration beyond its input stage, and the
backend's linearisation FSMs. None of these are here, because their arithmetic is not specified
precisely enough to reproduce. The top brings their connection points out as
ports.

## Structure

```
                clk_vfe                                          clk_be
 l_pix ─┬─► feature_detect (keyframes) ─► fd_*            fg_* ─► factor_graph_mem
        └─► img_compress ─┬─► frame_buffer  Frame (1) ┐            (pointer table + dense pool)
                          ├─► frame_buffer  Frame (2) ┴─► ft_*
                          └─► frame_buffer  Left  ┐               ls_* ─► lin_solver
 r_pix ──► img_compress ─────► frame_buffer Right ┴─► stereo_match ─► sm_*   ├─ lsm_wrapper (banded H)
          (keyframes only)                                                    ├─ fp_mul, fp_add
 td_* ──► track_data_mem (list of tracked features)                          └─ fp_sqrt, fp_recip
                                                                  rf_* ─► be_regfile (85 doubles)
                                                                trig_* ─► fp_trig (sin, cos)
                                                             imu_word ─► imu_input ─► imu_acc/gyro
```

| Module | Role |
|---|---|
| `navion_pkg` | Shared types. `cblock_t` is a compressed block, `obs_t` an observation, `f64_t` a double. |
| `img_compress` | 8-bit pixel stream to 26-bit compressed 4x4 blocks. |
| `frame_buffer` | One compressed frame. Block writes, pixel reads with reconstruction. |
| `feature_detect` | Streaming Shi-Tomasi score. Reports the best corner per 15x15 grid cell. |
| `stereo_match` | SAD template matching along a horizontal strip of the right frame. |
| `track_data_mem` | Dense list of up to 200 tracked features. Supports in-place update and removal. |
| `factor_graph_mem` | Two-stage feature-track memory: 4000 tracks x 10 slots into 4000 observations. |
| `lsm_wrapper` | Linear solver matrix memory. Folds to the upper triangle, then compacts or masks by the keyframe band. |
| `lin_solver` | In-place banded Cholesky, forward and backward substitution. |
| `fp_add`, `fp_mul` | IEEE-754 double add/subtract and multiply. Round to nearest even, one clock. |
| `fp_recip`, `fp_sqrt` | IEEE-754 double reciprocal and square root. Iterative and truncated, 57 and 55 clocks. |
| `fp_trig` | Double sine and cosine by a 60-step CORDIC for angles within ±π, 61 clocks. |
| `imu_input` | Six single-precision words per measurement from a 32-bit bus, converted exactly to double. |
| `be_regfile` | 85 double registers, one write port and two synchronous read ports, for backend intermediates. |
| `navion_top` | Wiring, keyframe/non-keyframe mode control, two clock domains. |

## Processing modes

The frontend works frame by frame. The `kf` input is sampled with the first
left pixel of a frame and decides how that frame is handled.

**Keyframe:**
- Both streams are compressed.
- The left frame goes into the tracking frame buffer whose turn it is, and also
  into the Left Frame buffer.
- The right frame goes into the Right Frame buffer.
- The uncompressed left stream feeds feature detection.

**Non-keyframe:**
- The right stream is ignored. Its compressor sees no valid pixels, which
  matches the real chip, where the right frame is not even fetched.
- Detection is idle.
- Only the tracking frame buffer is written.
- The Left/Right pair keeps the last keyframe.

Tracking frames ping-pong. Frame (1) and Frame (2) alternate every frame, so a
tracker always finds the previous frame and the current one. `cur_bank` names
the newer one.

Stereo requests are accepted only between frames, and only when the last
completed frame was a keyframe. A request at any other time is ignored: `sm_busy`
stays low and no result appears.

## Compressed frames

Each pixel loses its three least significant bits, leaving 5 bits. The frame is
then cut into 4x4 blocks. For each block the compressor finds:
- the minimum `mn` and the maximum;
- the threshold `thr = (mn + max) / 2`;
- one flag per pixel, set when `pixel >= thr`.

A block is stored as `{flags[15:0], thr[4:0], mn[4:0]}`, which is 26 bits.

The compressor sees pixels in raster order but emits blocks. It therefore keeps
three 5-bit rows in a line buffer: 3 x 752 x 5 bits, or 1.4 kB. On the fourth
row of each block row it finishes one block every four pixels.

Latency: `blk_valid` rises two clocks after the clock that takes the block's
last pixel.

Reconstruction happens in `frame_buffer`:
- flag 0 gives `mn`;
- flag 1 gives `min(31, 2*thr - mn)`, which is the block maximum to within one
  step.

A read returns the reconstructed 5-bit pixel one clock after `rd_en`.

A 752x480 frame is 22,560 blocks, or 73.3 kB. The four frame buffers together
hold 286 KiB, against 1.4 MB uncompressed.

Feature detection does **not** use compressed frames. Its gradients would see
the block edges and the two-level quantisation. It therefore reads the 8-bit
stream before compression.

## Feature detection

`feature_detect` streams one pixel per clock. It keeps four 8-bit line buffers
and a 5x5 window whose centre trails the input by two rows and two columns.

For the centre it computes central-difference gradients `Ix`, `Iy` at the 3x3
positions around it, and sums the products:

    a = Σ Ix²,  b = Σ Ix·Iy,  c = Σ Iy²
    score = (a + c) − isqrt((a − c)² + 4b²)

The score is twice the smaller eigenvalue of the structure tensor, which is the
Shi-Tomasi measure. The integer square root is a combinational 21-step
restoring root. Centres within two pixels of the border score 0.

The image is tiled into 15x15 cells, giving 50 x 32 cells at 752x480. Each cell
keeps its best score and position, and the first pixel wins a tie. When the
centre passes the last position of a cell, the cell is reported on
`fd_valid / fd_x / fd_y / fd_score`, three clocks after the completing input
pixel. A cell whose best score is below `fd_min_score` is suppressed.

One feature per cell keeps features spread over the image. A later selection
step, outside this RTL, picks among them the new features it needs.

## Stereo matching

`stereo_match` takes a feature position `(x, y)` in the left frame. It caches
the 51x5 template around it in registers. It then compares the template with
right-frame windows centred at `(x − d, y)` for `d = 0 .. RW − TW`. With the
421-pixel strip, `d` runs from 0 to 370. The cost is the sum of absolute
differences of reconstructed pixels.

The result is the disparity with the lowest cost; a tie keeps the smaller `d`.
Candidates whose window would leave the frame are skipped. `res_found` is low
only if none fits.

The unit is deliberately serial, at one pixel pair per clock. A request takes

    (TW·TH + 2) · (1 + number of candidate windows) + 1  clocks

With a full strip this is about 95,000 clocks. The reference chip matches all
of a keyframe's features in a few milliseconds, so it must compare many pixels
in parallel. Widening this loop is the obvious next step if throughput matters.

## Tracked-feature list

`track_data_mem` holds the features the tracker is following: a 12-bit track ID
and a 16-bit x and y position per feature, up to 200 features.

The list is kept dense in entries `0 .. count−1`:
- **update** rewrites an entry in place (the feature was tracked again);
- **remove** moves the last entry into the hole and decrements `count` (the
  feature was lost). The tracker must then look at the same index again;
- **add** appends, and is refused when the list is full.

One operation is taken per clock. The response (`rsp_ok`, and `rsp_data` for a
read) comes one clock later.

## Two-stage feature-track memory

A track is one landmark seen in up to 10 keyframes. Each sighting is an
observation: a 5-bit keyframe ID and three 64-bit coordinates, 197 bits in all.
With 4000 tracks a flat table would need 40,000 observations, 985 kB. Yet at
most 4000 observations exist at once, because most tracks are short.

`factor_graph_mem` therefore stores:
- a **pointer table** of 4000 x 10 entries, each 12 bits (60 kB), indexed by
  `(track, slot)`. All-ones means empty;
- a **dense pool** of 4000 observations (98.5 kB);
- a **free list**, a stack of the free pool entries (6 kB).

Together that is about 6x smaller than the flat table.

Operations:
- **Write.** Writing to an empty slot pops a free entry; `wr_fail` pulses when
  none is left. Writing to a filled slot overwrites its entry. A write takes two
  clocks.
- **Read.** The pointer and then the observation are read: `rd_valid` follows
  `rd_en` by two clocks, with `rd_hit` low for an empty slot.
- **Delete.** `del_en` frees one track: it walks the track's slots, one per
  clock, and pushes every used entry back.
- **Reset.** After reset the table is cleared and the free list filled, one
  entry per clock, with `busy` high.

## Sparse linear solver matrix

The backend solves `H·dx = ε` at every iteration. `H` is a symmetric 300x300
matrix: 20 keyframes of 15 state variables. It is positive definite, and its
non-zeros follow the structure of the problem. States of keyframes far apart in
time are not linked.

This design models that structure as a **keyframe band**. The 15x15 block of
keyframes `(a, b)` may be non-zero when `|a − b| ≤ BAND`, with `BAND = 4`.

A band has a key property: its Cholesky factor has no fill-in outside the band.
The factor can therefore be written over `H`, in the same compact memory, with no
extra space.

`lsm_wrapper` maps each request in two steps:
1. It folds `(row, col)` onto the upper triangle by swapping the two when
   `row > col`.
2. It tests the band. Inside the band it computes a compact address; outside,
   it masks the request. A masked read returns 0.0 and a masked write is
   dropped.

In the compact layout, row `r` of keyframe block `kb` stores columns `r ..
hi(kb)`, where `hi(kb) = min(NKF, kb + BAND + 1)·BS − 1`. With `q = r mod BS`
and `W = hi(kb) − kb·BS + 1`, the address is:

    BASE[kb] + q·W − q(q−1)/2 + (c − r)

The block bases `BASE[kb]` are computed at elaboration. At the defaults this
stores 18,150 of the 45,150 upper-triangle doubles: 40%, or 142 kB.

`lin_solver` computes `H = UᵀU` in place, with row `i` and column `j ≥ i`:

    s = H[i][j] − Σ_{k = lo(j)}^{i−1} U[k][i]·U[k][j]
    U[i][i] = √s,  R[i] = 1/U[i][i]   (j = i)
    U[i][j] = s·R[i]                  (j > i)

Then it runs forward substitution (`y = U⁻ᵀε`) and back substitution
(`dx = U⁻¹y`), and writes `dx` over `ε` in a separate vector memory. Each inner
product runs only over the band: `lo(c) = max(0, c/BS − BAND)·BS`. The work
therefore scales with `N·(band width)²` rather than `N³`: at the defaults,
620,650 multiply-accumulate steps instead of about 9 million.

Division is done as one reciprocal per row (`R[i]`) followed by multiplications.
The sequencer is not pipelined. Each multiply-accumulate takes two memory reads,
one `fp_mul` and one `fp_add`, about 6 clocks. A full-size solve takes 3.87
million clocks, about 46 ms at 83.3 MHz.

The horizon is fixed when the solver is built. A shorter horizon, such as the
10 or 15 keyframes used for easy scenes, is loaded with identity blocks and a
zero right-hand side for the unused keyframes. Those unknowns then come back
exactly zero. The solve time does not shrink, because the solver still walks
the full band.

While `busy` is low, the `m_*` and `v_*` ports give direct access to the matrix
and vector memories. An external linearisation step uses them to load `H` and
`ε` and read back `dx`. `n_mac` reports the step count of the last solve.

## Inertial measurement input

Each measurement has three accelerometer and three gyroscope values. They arrive
as six IEEE single-precision words on a 32-bit bus, one word per `imu_valid`:
acc x, y, z, then gyro x, y, z.

`imu_input` converts every word to double precision exactly:
- a normal value keeps its 23-bit mantissa and has its exponent rebased by +896;
- a subnormal value is normalised with a leading-zero count;
- infinities and NaNs keep their class and payload bits.

One clock after the sixth word, `imu_meas_valid` pulses and all six doubles
appear together on `imu_acc` and `imu_gyro`. `imu_resync` restarts the word
count. The inertial block runs on the backend clock. The preintegration that
would consume these values is not part of this RTL.

## Floating point

The backend works in IEEE-754 double precision, with the following units:

| Unit | Method | Latency |
|---|---|---|
| `fp_add` | Add or subtract, round to nearest even (guard, round and sticky bits). | 1 clock |
| `fp_mul` | 53x53-bit product, round to nearest even. | 1 clock |
| `fp_recip` | Restoring division of 1.0 by the mantissa, one quotient bit per clock, truncated (within one ulp). | 57 clocks |
| `fp_sqrt` | Digit-by-digit square root, one bit per clock, truncated (within one ulp). | 55 clocks |
| `fp_trig` | Sine and cosine together: rotation-mode CORDIC in 64-bit fixed point with 60 fraction bits. | 61 clocks |

In all units subnormal inputs and results are flushed to zero. Infinity and
NaN inputs are not recognised, and only `fp_mul` returns infinity, on exponent
overflow. Neither case arises when solving a well-scaled positive definite
`H`.

`fp_trig` converts the angle to fixed point and folds angles beyond ±π/2 by π,
negating the results. It starts the CORDIC at `(K, 0)` so that the gain cancels,
and converts back with truncation. The test requires an absolute error below
1e-14 for angles within ±π. The arctangent table and `K` are computed at elaboration.

`fp_recip`, `fp_sqrt` and `fp_trig` use a `busy`/`in_valid` handshake, and an
assertion checks that a unit is never started while busy.

## Where this design departs from, or goes beyond, the reference chip

The following are this design's own choices:
- **Band pattern.** The chip stores about 38% of the triangle in 134 kB. The
  exact non-zero pattern is not published. The keyframe band with `BAND = 4` is
  this design's model, and stores 40% in 142 kB.
- **Compression ratios.** The published savings for the track memory (4.9x or
  5.4x) and the solver memory (5.2x or 5.4x) are quoted inconsistently.
- **Frame buffers.** The frame buffer total differs from the published 317.6 kB.
  The layout here stores exactly 26 bits per block, with no extra metadata.
- **Reconstruction rule.** The compressed-frame reconstruction rule, the SAD
  cost and the leftward disparity search are not specified by the reference.
  The same holds for tie-breaking, the gradient kernel and the window sizes of
  the detector, and all handshakes and latencies.
- **Detection grid.** Detection uses the 15x15 cell size the chip lists among
  its tracking parameters, which gives 1600 cells. The chip is reported to
  detect 1824 features per frame; that number is not reproduced.
- **Throughput.** Stereo matching and the solver are serial: one pixel pair or
  one multiply-accumulate at a time. Their results are exact, but they are much
  slower than the parallel units of the chip.
- **Horizon size.** The solver's horizon is fixed at build time by `NKF`, `BS`
  and `BAND`. A shorter horizon is run by loading identity blocks for unused
  keyframes.
- **Input frames.** Frames are taken as already undistorted and rectified.
- **Clock domains.** No logic crosses between `clk_vfe` and `clk_be`, so no
  synchroniser is present.

## Verification

Every test is self-checking and ends with a
`TB_RESULT checks=<n> failures=<m>` line. Each compares the design with a
reference computed independently inside the testbench, and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_fp_add`, `tb_fp_mul` | 1000 random cases each, including cancelling pairs, bit-exact against the simulator's `real` arithmetic. |
| `tb_fp_recip`, `tb_fp_sqrt` | Within one ulp of `1.0/x` and `$sqrt`, plus the fixed latency. |
| `tb_img_compress` | Every block of two frames against a software compressor, plus the latency. |
| `tb_frame_buffer` | Every pixel against the reconstruction rule. |
| `tb_stereo_match` | Disparity and cost against an exhaustive search, plus the cycle count formula. |
| `tb_feature_detect` | Per-cell best corner against an integer reference, plus the threshold, count and latency. |
| `tb_track_data_mem` | Random add, update, remove and read operations against a queue model, including a full list. |
| `tb_factor_graph_mem` | Random writes, reads and deletes against a model, including pool exhaustion. |
| `tb_fp_trig` | 507 angles over ±π against `$sin`/`$cos` (absolute error below 1e-14), plus the latency. |
| `tb_imu_input` | 400 measurements against a real-arithmetic reference, including subnormals, infinities and NaNs, plus the framing and resync. |
| `tb_be_regfile` | Random writes and two-port reads against a model, including read-during-write and out-of-range addresses. |
| `tb_lsm_wrapper` | All 90,000 positions at full size: folding, masking, distinct addresses, and the stored count of 18,150. |
| `tb_lin_solver` | Residual of a random banded positive definite system, the step count, and a cycle bound. |
| `tb_workload_adapted` | Default-size solver with 10- and 15-keyframe horizons (identity padding), and the feature list at 35, 50, 100 and 150 features. |
| `tb_navion_top` | End-to-end at reduced size (64x16 frames, 8x8 cells, 4x3-state horizon). |
| `tb_navion_full` | End-to-end at the full default size: 752x480, 200 features, 20-keyframe horizon, 4000 tracks. |

The two end-to-end tests run the same sequence: keyframe, non-keyframe,
keyframe. They check:
- the compressed frames, read back through the tracking and stereo paths;
- stereo results and detected features, against reference models;
- the tracked-feature list, filled until full, then updated and pruned;
- the track memory, filled until full, then read and deleted;
- every register of the register file, written and read on both ports;
- inertial measurements, streamed in single precision and checked in double;
- sines and cosines of a few angles;
- a banded system, solved and checked by its residual, including a masked
  write.

Each mechanism must occur at least once:
- mode switch;
- bank switch;
- refused stereo request;
- ignored right stream;
- detection skipped in a non-keyframe;
- full lists;
- removals;
- masked access;
- register file access;
- inertial measurement;
- sine/cosine;
- solve.

The full-size run takes under a minute.

To run a test with Verilator (5.x), list the package first and let `-y` find
the modules:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/navion_pkg.sv tb/tb_navion_top.sv \
          --top-module tb_navion_top -Mdir obj_top
./obj_top/Vtb_navion_top
```

Replace `tb_navion_top` with any testbench name. All parameters have the
reference chip's sizes as defaults. The end-to-end test at reduced size shows
which parameters to override to make a small instance.
