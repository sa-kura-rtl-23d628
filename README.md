# SA-Kura drift engine — SystemVerilog implementation

SA-Kura is a coprocessor for one kind of diffusion sampling. Each pixel of
an image is a phase oscillator θ. The drift of each oscillator comes from
Kuramoto coupling to its 5×5 neighbourhood and to a global reference phase.
For every pixel *i*, one sampling step computes

```
drift_i  = K/|N| · Σ_j sin(θ_j − θ_i) + K_ref · sin(ψ_ref − θ_i) + σ · z_i
θ_new_i  = θ_i + drift_i + score_i
```

The neighbourhood term is the expensive part. The identity
`sin(θj − θi) = sinθj·cosθi − cosθj·sinθi` turns it into
`cosθi·S_i − sinθi·C_i`, where `S_i = Σ sinθj` and `C_i = Σ cosθj`. The
sums do not depend on the centre pixel. A systolic array can therefore
accumulate them as the neighbour samples stream past, and the centre is
applied once at the end. The 5×5 window includes the centre itself. That
self term is `sinθi·cosθi − cosθi·sinθi = 0`, so it drops out of the result.

Top module: `rtl/sa_kura_top.sv`. The default build is the 20×5 array with
20 banks of 1024×32-bit memory. It processes a 96×96 phase map.

## Block overview

```
 host port ──► Local Memory (NH banks, 1024×32)
                 │ θ (NH tile rows + 4 halo rows per column)
                 ▼
               Streamer ── shared quarter-wave sine table, NH+4 sin/cos units
                 │ column of (sin, cos), NH+4 high          │ raw centre θ
                 ▼                                          ▼
               Column Buffer (NW columns) ─ top 4 ─► Row Buffer (4 × NW)
                 │ bottom NH                                 │ feeds top PE row
                 ▼                                           ▼
               PE array NH × NW  (S and C accumulators per PE)
                 │ drain: core = cosθ·S − sinθ·C, and (sinθ, cosθ) of the centre
                 ▼
   Ref Term Unit + RNG ─► Theta Update Unit ─► Controller (+ score, θ) ─► Local Memory
```

| File | Function |
|------|----------|
| `kura_pkg.sv` | Types (`phase_t`, `q15_t`, `acc_t`, `sc_t`), constants (M = 5), sine-table function |
| `sin_lut.sv` | Multi-port quarter-wave sine table, 4096 samples, Q1.15 |
| `sincos_unit.sv` | Phase → (sin, cos): quadrant decode plus 2-bit linear interpolation |
| `local_memory.sv` | NH banks, one synchronous read port and one write port (half-word strobes) per bank |
| `streamer.sv` | Reads the halo-extended columns of each tile (line buffer for rows shared between rows of tiles), converts them, pushes them to the Column Buffer |
| `column_buffer.sv` | FIFO of NW columns; splits each popped column between the Row Buffer and the array |
| `row_buffer.sv` | 4 × NW halo rows above the array. A retained plane plus a sweep plane that shifts down |
| `pe.sv` | One processing element |
| `pe_array.sv` | NH × NW grid of PEs with the right, down and drain links |
| `ref_term_unit.sv` | `K_ref sinψ · cosθ − K_ref cosψ · sinθ` per row |
| `rng.sv` | Per-row xorshift32 with an approximately Gaussian output |
| `theta_update_unit.sv` | `k_nbr·core + ref + σ·z` |
| `controller.sv` | Tile schedule, stalls, configuration registers, centre-θ FIFO, score merge, write-back |
| `sa_kura_top.sv` | Wiring, host memory port, and the shared sine table for the Streamer |

## Number formats

* **Phase**: 16-bit Q1.15 holding θ/π. The range [−1, 1) covers [−π, π), so
  ordinary two's-complement wrap-around is the 2π wrap.
* **sin/cos samples**: signed Q1.15.
* **Accumulators**: signed 32-bit. The core `(cosθ·S − sinθ·C) >>> 15` is Q16.15.
  With 25 samples its magnitude is at most 50.
* **Configuration coefficients** are Q1.15. The host folds the time step and
  the 1/π phase scaling into them:
  `k_nbr = K·dt/(25π)`, `kref_sin/cos = K_ref·dt·sin/cos(ψ_ref)/π`,
  `sigma = sqrt(2·D·dt)/π`.
* **Noise z**: Q3.15 (18 bits). It is the sum of three uniform 10-bit
  fields, which gives variance ≈ 1.
* **Score term**: Q1.15 phase increment, supplied from outside.

All products are formed at full width. Results are truncated by an
arithmetic shift of 15. The final sum is truncated to 16 bits, which wraps
the phase.

## Sine table

The table covers a quarter wave: `L[k] = round(32767·sin(kπ/8192))` for
k = 0…4095, with an implicit `L[4096] = 32767`. The 16-bit phase is split
into a 2-bit quadrant, a 12-bit index and a 2-bit fraction.

* sin uses `Q(f)`, where f is the 14-bit offset inside the quadrant.
* cos uses `Q(16384 − f)`.
* `Q` interpolates linearly between `L[i]` and `L[i+1]` with weight frac/4.
* The quadrant then selects the signs and swaps sin and cos.

Each unit therefore needs two pairs of table reads. All NH+4 units in the
Streamer share one table with 2·(NH+4) read ports. The table is built by an
`initial` loop from a fixed-point Taylor series in `kura_pkg`. Worst-case
error against the true sine is 3 LSB.

## Memory layout

Pixel (y, x) is stored in bank `y mod NH` at word `(y div NH)·IMG_W + x`.
Each 32-bit word holds two copies of the phase. `parity_o` selects which
copy is current. During a step, θ_new is written into the other half of the
word using the half-word strobe. At the end of the step the parity flips.
No pixel is overwritten while a later tile may still need it as a
neighbour. This makes write-back effectively "after all tiles" without a
second image buffer.

A 96×96 map needs ⌈96/20⌉·96 = 480 words per bank, and 1024 are built.
`streamer` checks at elaboration that `⌈IMG_H/NH⌉·IMG_W ≤ DEPTH`.

## Tile schedule

A tile is NH rows × NW columns of pixels. Tiles are processed row of tiles
by row of tiles, left to right. For a tile at (y0, x0), the Streamer
produces the columns x0+NW+1 down to x0−2, that is NW+4 columns from right
to left. Each column is NH+4 samples high (rows y0−2 … y0+NH+1).

Schedule of one tile, in controller cycles:

1. **Prefill** (NW cycles). Each cycle pops one column and shifts the
   array one position to the right. The upper 4 entries of the column go
   into the Row Buffer. The lower NH entries go into the left PE column.
   After the prefill, each PE (r, c) holds the sample at (+2, ·) of its own
   window.
2. **Sweep** (25 cycles, s = 0…24). Offset group g = s div 5 runs over
   Δx = +2…−2. Within a group, j = s mod 5 runs over Δy = +2…−2.
   * j = 0 uses the retained samples of the PE and of the Row Buffer.
   * j = 1…4 shift a working copy down by one row per cycle. The Row Buffer
     feeds the top row.
   * On j = 4 of the first four groups, one more column is popped and the
     retained plane moves one position to the right.
   * Every sweep cycle adds the PE's current (sin, cos) sample into S and C.
   * At s = 12 (offset (0, 0)) the PE captures its own centre sample.
3. **Combine** (1 cycle). Each PE computes `core = (cosθ·S − sinθ·C) >>> 15`
   and loads `{core, sinθ, cosθ}` into a separate drain register.
4. **Drain** (NW cycles). The drain registers shift right. The array's right
   edge delivers one tile column per cycle on `drain_h` (core) and
   `drain_t` (centre sin/cos). This overlaps with the next tile's prefill.

Steady state is therefore **NW + 25 + 1 cycles per tile**: 31 for the 20×5
array. A 96×96 step takes 100 tiles, which is 3 105 cycles including the
last drain.

The NH+4 rows of one column fall into banks 0, 1, NH−2 and NH−1 twice, so a
column cannot be read from single-ported banks in one cycle. The Streamer
handles this as follows:

* **First row of tiles.** Each column takes two read cycles: the NH tile
  rows, then the 4 halo rows.
* **Later rows of tiles.** A line buffer supplies the four rows that
  adjacent rows of tiles share. It has two sets of IMG_W × 4 phases. The
  four rows are the last two tile rows and the lower halo of the previous
  row of tiles, which are the upper halo and the first two tile rows of
  the current one. Each column is then a single read of banks 2…NH−1 (tile
  rows) and 0, 1 (lower halo).

One column per cycle always keeps up with the array. The two-cycle read
keeps up while 2·(NW+4) ≤ NW+26, i.e. NW ≤ 18. If the Column Buffer is
empty when a pop is due, the controller stalls all array controls for that
cycle and raises `stall_o`. Nothing is lost, but the tile takes longer. A
handful of stall cycles occur at the start of every step. For NW > 18 the
first row of tiles is streamer-bound. For example, a 25×25 array takes 58
cycles per tile there and 51 afterwards.

Other array shapes are a matter of parameters. Each bank must hold
⌈IMG_H/NH⌉·IMG_W words. For a 96×96 image, arrays with NH ≥ 10 fit in
1024 words. NH = 5 needs `DEPTH` = 2048.

Pixels outside the image enter as sin = cos = 0. They add nothing to S and
C. The normalisation stays `K/25` at the borders.

## Post-array pipeline

Each drained column meets the following in the same cycle:

* the reference term from the Ref Term Unit, computed from the drained
  centre sin/cos;
* one noise sample per row from the RNG;
* the scaled core, in the Theta Update Unit (one register stage).

The next cycle, the Controller adds the raw centre phase and the score
term. The raw centre phase comes from a FIFO that the Streamer fills while
reading the centre columns. The Controller then writes θ_new into the
inactive half of each memory word. Rows or columns of a tile that fall
outside the image are masked out of the write.

## Top-level interface (`sa_kura_top`)

| Port | Dir | Width | Meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `start_i` | in | 1 | start one sampling step; the configuration is latched here |
| `cfg_k_nbr_i`, `cfg_kref_sin_i`, `cfg_kref_cos_i`, `cfg_sigma_i` | in | 16 | coefficients (Q1.15, see above) |
| `cfg_seed_i` | in | 32 | RNG seed, loaded at start |
| `busy_o`, `done_o` | out | 1 | step in progress; one-cycle pulse at the end |
| `parity_o` | out | 1 | which half of each word holds the current phase |
| `tile_done_o`, `stall_o` | out | 1 | one pulse per tile drained; array stalled this cycle |
| `host_re_i`, `host_wstrb_i[1:0]`, `host_bank_i`, `host_addr_i`, `host_wdata_i` | in | 1, 2, 5, 10, 32 | memory access while idle |
| `host_rdata_o` | out | 32 | read data, one cycle after `host_re_i` |
| `score_req_o`, `score_y0_o`, `score_x_o` | out | 1, 16, 16 | score term needed for pixels (y0 + r, x) |
| `score_i[NH]` | in | 16 each | score term, valid in the same cycle as the request |

Parameters: `NH` = 20, `NW` = 5, `IMG_H` = 96, `IMG_W` = 96,
`DEPTH` = 1024, `CB_DEPTH` = NW.

To use it: load the phases, pulse `start_i`, and serve `score_req_o`
combinationally. Wait for `done_o`, then read the phases back from half
`parity_o`.

## Relation to the published architecture

These parts follow the published description:

* the trigonometric decomposition;
* the array of NH × NW PEs with S/C accumulators;
* the Column Buffer of NW columns, each NH+4 high, split between the Row
  Buffer and the array;
* the (M−1) × NW Row Buffer that shifts downward and is restored;
* the shared quarter-wave table with 4096 samples and 2-bit interpolation;
* the per-step configuration registers for the reference coefficients;
* NH banks of 1024 × 32-bit memory;
* the tile cycle count NW + M² + 1 with drain overlapped with prefill;
* write-back of θ_new after all tiles.

These parts are my own choices, because the description leaves them open:

* **Offset order.** The sweep starts at (+2, +2). The described order
  starts at (−2, −2). With data entering at the left and the top, the
  first sample a PE sees is from the bottom row of its window. The sums do
  not depend on the order.
* **Drain registers.** The drain uses its own register chain. The published
  PE shares its right-hand outputs with the drain. A separate chain makes
  the drain/prefill overlap straightforward.
* **Drain ports.** `drain_h` carries the core and `drain_t` the centre
  sin/cos.
* **Borders.** Out-of-image samples are zero.
* **Memory layout.** The bank mapping and the two copies per word are mine.
* **Streamer bank schedule.** The bank schedule and the line buffer are
  mine. With them, only the first row of tiles of arrays wider than 18
  columns misses the published tile period.
* **RNG.** Xorshift32 per row, with a sum of three uniforms as the
  Gaussian approximation.
* **Score interface.** The score term arrives on a request/response port
  with pre-scaled values.
* **Bus interfaces.** The SoC bus and DMA are replaced by plain ports.

The surrounding SoC is not part of this design: the RISC-V core, DMA,
interconnect, system memory, peripherals and the score network.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares the
block against an independent model written in the testbench and ends with
`TB_RESULT checks=<n> failures=<m>`.

| Testbench | What it checks |
|-----------|----------------|
| `tb_sincos_unit` | all 65 536 phases, bit-exact against a table built with `$sin`, plus ±3 LSB accuracy |
| `tb_local_memory` | reads and half-word writes on all banks |
| `tb_column_buffer` | FIFO order, split outputs, full/empty/free count |
| `tb_row_buffer` | retained/sweep planes, restore and downward shift |
| `tb_pe` | accumulation, capture, combine, drain |
| `tb_pe_array` | array plus Row Buffer on six random tiles, S/C and core against a direct 5×5 sum |
| `tb_ref_term_unit`, `tb_theta_update_unit` | arithmetic against a reference expression |
| `tb_rng` | bit-exact sequence and mean/variance of z |
| `tb_streamer` | addresses, column contents, border zeros, centre FIFO, back-pressure |
| `tb_controller` | schedule, capture timing, write-back addresses and masks, score requests |
| `tb_sa_kura_top` | whole engine on a 10×11 image with a 4×3 array: every written phase over two steps, plus counts of prefill, centre capture, drain/prefill overlap, stalls, masked border writes and tile period |
| `tb_sa_kura_full` | default 20×5 build on a 96×96 image, two steps, all 9 216 results of each step checked against the model, tile period 31 cycles, mechanism counts |
| `tb_sa_kura_configs` | the same 96×96 step on 5×5 (2048-word banks), 10×10 and 25×25 arrays, through the harness `sa_kura_config_run`; every pixel and the tile period (31, 36 and 51 cycles; 58 in the first row of tiles of the 25×25 array) |

To run one testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb rtl/kura_pkg.sv tb/tb_sa_kura_top.sv --top-module tb_sa_kura_top
./obj_dir/Vtb_sa_kura_top
```

The full-size testbench takes about a minute and a half to build and under
a second to run.
