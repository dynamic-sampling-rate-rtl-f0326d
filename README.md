# Dynamic Sampling Rate: per-tile adaptive shading rate for a tile-based GPU

A GPU normally samples every triangle once per pixel and runs the fragment
shader for each sample. Large parts of a typical mobile game frame (sky, flat
UI panels, blurred backgrounds) hold so little detail that far fewer samples
would give the same image. Consecutive frames of an animation are also very
alike. So whatever was true of a screen region in one frame is very likely
still true in the next.

Dynamic Sampling Rate (DSR) builds on both facts in a tile-based renderer.
It works like this:

- After a 16x16-pixel tile has been rendered into the on-chip Color Buffer, a
  small Frequency Analysis Unit takes the 2D discrete cosine transform (DCT) of
  the tile.
- From the high-frequency part of that spectrum, a five-state machine decides
  whether the tile could have been sampled more coarsely, needs finer
  sampling, or is fine as it is.
- The decision is stored in a Sampling Rate Table, which has one entry per
  screen tile.
- The next time the same tile is rendered (in the next frame), the rasterizer
  samples it at the stored rate.

The analysis of one tile runs while the next tile is being rendered. The
mechanism therefore adds hardware but, in the intended operating point, no
time.

This repository holds synthesizable SystemVerilog for the DSR additions:

- the Sampling Rate Table;
- the state machine;
- the Frequency Analysis Unit with its kernel ROM, compute units, DCT buffer
  and MaxC logic;
- the Color Buffer extended for coarse samples and upsampling;
- the generator of the coarse sample grid;
- a top level that sequences a tile through all of them.

The rest of the baseline GPU is not included: the geometry pipeline, the
coverage rasterizer, the depth test, the shader cores, blending and memory.
These appear as ports.

## Sampling levels and superfragments

There are five sampling rates. Each level halves the sample density in both X
and Y:

| level | name   | one sample per | superfragments per tile | superquads per primitive |
|-------|--------|----------------|-------------------------|--------------------------|
| 0     | 1x     | 1x1 pixel      | 256                     | 64                       |
| 1     | 1/4x   | 2x2 pixels     | 64                      | 16                       |
| 2     | 1/16x  | 4x4 pixels     | 16                      | 4                        |
| 3     | 1/64x  | 8x8 pixels     | 4                       | 1                        |
| 4     | 1/256x | 16x16 pixels   | 1                       | 1 (lane 0 only)          |

A *superfragment* is the block of 2^L x 2^L pixels that shares one sample. It
is sampled at the centre of its block. Like ordinary fragments,
superfragments travel in 2x2 groups called *superquads*.

`superquad_gen` walks the superquads of a tile in raster order. It runs once
per primitive, issuing one superquad per cycle on a valid/ready port. For each
superquad it gives four sample positions in half-pixel units, so that the
centre of an s-pixel block starting at pixel x is exactly `2x + s`.

All later stages see one fragment per superfragment:

- depth test;
- shading;
- blending, which does one Color Buffer read and one write per superfragment.

## Color Buffer: anchors and upsampling

`color_buffer` holds one tile: 16 lines of 16 RGBA8 pixels, 1 KB in total.

**Blending.** At level L, blending addresses the buffer in superfragment
coordinates `(sx, sy)`. The colour is stored at the superfragment's top-left
("anchor") pixel `(sx<<L, sy<<L)`. All other pixels of the block are left
untouched.

**Upsampling.** When the tile is complete, `up_start` triggers an upsampling
pass that takes one line per cycle, 16 cycles in total:

- Line `y` is rebuilt from line `y & ~(2^L-1)`.
- Pixel `x` of that line takes the colour of pixel `x & ~(2^L-1)`.
- Because anchors map onto themselves, processing the lines in order is safe.
- At 1x the pass changes nothing.

`up_done` pulses after the last line.

**Read ports.** Two registered row read ports serve the Frequency Analysis
Unit and the flush to memory at the same time.

## The decision: MaxC and the state machine

The analysis reduces a 16x16 coefficient matrix `c(p,q)` to one number. It
ignores the `D` lowest anti-diagonals (all `p+q < D`) and takes the largest
remaining magnitude:

    MaxC(D) = max { |c(p,q)| : p + q >= D }

`D` and the threshold `T` it is compared against depend on the tile's current
state. Two pairs are used:

- `<T_R, D_R>` for the question "can the rate go down?";
- `<T_I, D_I>` for the question "must the rate go up?".

The state machine (`sr_fsm`) applies its tests in this order:

1. At 1/256x the tile always goes back to 1/64x. A single colour has no
   spectrum to judge, so this is the only way a flat tile can notice new
   detail.
2. If `MaxC(D_R) < T_R`, the state goes one level down (**Reduce**). This is
   not possible at 1/256x.
3. Otherwise, if `MaxC(D_I) >= T_I`, the state goes one level up
   (**Increase**). This is not possible at 1x.
4. Otherwise the state is unchanged (**Maintain**).

The tuples are stored as follows:

- Reduce tuples exist for 1x, 1/4x, 1/16x and 1/64x: `params.t_reduce[level]`
  and `params.d_reduce[level]`.
- Increase tuples exist for 1/4x, 1/16x and 1/64x: `params.t_increase[level-1]`
  and `params.d_increase[level-1]`.

The tuples are tuned per application by an offline search, and no values are
published. They are therefore an input port (`params`, a packed
`dsr_params_t`) rather than constants. The thresholds are in the same units as
the coefficients (see fixed point below).

`maxc_unit` computes both maxima in one sweep over the coefficients. It has
two running maxima, each gated by its own `D`, and `sr_fsm` provides the two
`D` values for the current state.

## Frequency Analysis Unit

The unit (`freq_analysis_unit`) computes the 2D DCT as two passes of 1D DCTs
with a shared kernel matrix:

    K[p][q] = 1/sqrt(16)                       for p = 0
            = sqrt(2/16) cos((2q+1) p pi / 32)  otherwise
    DCT = K X K^T, computed as Aux = (K X)^T, DCT = (K Aux)^T

The unit is built from these parts:

| part | function |
|------|----------|
| `dct_kernel_rom` | `K` as a 16x16 table of 12-bit signed values with 11 fraction bits. It is computed at elaboration time from the formula above, rounded to nearest. One row is read per cycle. |
| `dct_compute_unit`, 4 of them | Each holds one 16-sample input row. Every cycle it forms one output coefficient, the dot product of that row with kernel row `k`. The result is rounded, shifted back to the coefficient format and saturated. |
| `dct_buffer` | 16x16 coefficients, used for both the intermediate and the final result. Pass 0 writes the four results of a cycle into four *columns*. Pass 1 writes them into four *rows*. |
| `maxc_unit` | Folds every final coefficient into the two MaxC values as it is produced. |
| `sr_fsm` | The state decision described above. |

### Schedule

1. `start` reads the tile's current state from the SRT.
2. Each pass handles four groups of four rows. For each group, the unit spends
   5 cycles loading the four input rows (registered reads) and then 16 cycles
   computing, one coefficient per unit per cycle.
3. A pass takes 84 cycles. The decision and the SRT write take one more cycle.
4. `done` rises on the 169th clock edge after the one that accepts `start`.

Only pass 0 reads the Color Buffer. `cb_done` pulses after its last read,
about 68 cycles in, and from then on the Color Buffer can belong to the next
tile.

### Why pass 1 writes rows

The published dataflow writes both passes by columns and reads by rows, so
that the buffer itself performs the two transpositions. With four units
working in lock step, writing the second pass back by columns would overwrite
rows that have not yet been read. Pass 1 therefore writes rows. The buffer
then ends up holding `DCT^T` instead of `DCT`. That does not matter here,
because MaxC uses only `|c|` and `p+q`, both of which are symmetric in `p`
and `q`.

### Fixed point

| quantity | format |
|----------|--------|
| input to pass 0 | 8-bit luma, shifted left by 2 |
| DCT coefficients and `T` thresholds | 16-bit two's complement with 2 fraction bits |
| kernel | 12-bit two's complement with 11 fraction bits |
| magnitudes (`mag_t`) | 15 bits; −32768 saturates to the maximum |

The luma used as input is `Y = (77 R + 150 G + 29 B + 128) >> 8`.

The largest coefficient is the DC term of a white tile: 255 · 16 · 4 = 16320,
which fits in 16 bits. Each 1D pass rounds half-up at the 11-bit shift and
saturates. A threshold of, for example, 10.0 in DCT units is therefore written
as 40.

## Sampling Rate Table

`sampling_rate_table` has one 3-bit state per screen tile. By default it has
8100 entries, the tile count used for a 1080x1920 screen.

| port | user | access |
|------|------|--------|
| A | tile sequencing | synchronous read when a tile starts |
| B | Frequency Analysis Unit | synchronous read and write |

After reset, a sweep writes 1x into every entry, one per cycle. It takes
8100 cycles, and `init_busy` is high meanwhile. Every tile therefore starts at
full rate and works its way down over the first frames.

## Sequencing a tile (`dsr_raster_unit`, the top)

The top wires all of the above together. It moves each tile through these
states:

| state | what happens |
|-------|--------------|
| `T_IDLE` | Wait for a tile from the scheduler (`tile_valid`/`tile_ready`). |
| `T_LOOKUP` | Read the tile's state from the SRT (port A). |
| `T_RENDER` | For each primitive (`prim_valid`/`prim_ready`), run the superquad walk. Blending reads and writes the Color Buffer through `bl_rd_*`/`bl_wr_*`. The tile ends on the `tile_end` pulse. |
| `T_UPSAMPLE` | Run the 16-cycle replication pass. |
| `T_WAIT_FAU` | Only if the analysis of the previous tile has not finished: wait for it (`stall_fau_busy`). |
| `T_DRAIN` | Start the FAU on this tile and flush the 16 rows to memory (`fl_*`, valid/ready, one 64-byte row per transfer) at the same time. Return to `T_IDLE` when the flush is complete and the FAU has released the Color Buffer (`cb_done`). |

The rest of the analysis then overlaps the next tile. The result appears on
the `fau_*` outputs with a `fau_done` pulse: tile, old and new state,
decision, and both MaxC values.

A new tile is held back (`stall_same_tile`) while the FAU is still analysing
that very tile. This only happens when the frame is a single tile or has very
few tiles. It guarantees that the SRT lookup always sees the state decided in
the previous frame.

## Parameters and sizes

| name | default | meaning |
|------|---------|---------|
| `TILE_DIM` (package) | 16 | tile edge in pixels |
| `NUM_UNITS` (package) | 4 | DCT compute units |
| `NUM_TILES` (top, SRT) | 8100 | SRT entries |
| `TILE_X_W`, `TILE_Y_W` (top) | 7, 7 | tile coordinate widths (up to 128 tiles per axis) |
| `COEF_W`/`COEF_FRAC` | 16/2 | coefficient format |
| `KERNEL_W`/`KERNEL_FRAC` | 12/11 | kernel format |

A note on tile counts:

- With 16x16 tiles, a 1080x1920 screen is 67.5 x 120 tiles.
- The 8100 default is 1080·1920/256.
- Giving the half-height last tile row its own entries needs 8160
  (`NUM_TILES = 8160`, still a 13-bit index).

## Where this RTL departs from, or adds to, the published design

- **SRT entry width.** The design description sizes an entry at 3 bits, enough
  for five states (2.96 KB for 8100 tiles). The simulator configuration lists
  4 bits per entry. This RTL uses 3 bits.
- **Increase test.** The prose description says "greater than" the Increase
  threshold. The parameter-search algorithm uses "greater or equal". This RTL
  uses `>=`. Reduce is strictly "lower than" in both.
- **DCT buffer orientation.** Pass 1 writes rows instead of columns (see
  above), so the final matrix is transposed. This does not affect MaxC.
- **Input of the transform.** The analysed image is the tile's luma. The
  published design does not say which channel or combination it transforms.
- **The DCT core.** The published design reuses a commercial library DCT, with
  its compute units replicated four times. The compute units, the fixed-point
  formats and the load/compute schedule here are this design's own, and so is
  the 169-cycle latency.
- **No-stall claim.** The published design reports that with four compute
  units the analysis never stalls the pipeline. Here the analysis is hidden
  only when the next tile takes longer to render than the ~101 cycles of the
  FAU that remain after `cb_done`. Shorter tiles wait (`stall_fau_busy`), and
  that case is exercised and counted in the testbench.
- **Anchor storage and upsampling.** The published design only says that one
  Color Buffer access is made per superfragment and that upsampling replicates
  colours. The anchor pixel, the one-line-per-cycle pass and the lone-lane
  superquad at 1/256x are this design's own.
- **Handshakes, reset sweep and the same-tile interlock** are this design's
  own.

## Verification

Each module has a self-checking testbench in `tb/`. Each one:

- compares the module against models in `tb/dsr_ref_pkg.sv`, computed
  independently of the RTL: real-valued and bit-exact DCT, MaxC, the FSM, and
  luma;
- checks latencies where the design has them (for example the FAU's 169
  cycles, the 16-cycle upsampling and the SRT sweep);
- ends with a `TB_RESULT checks=N failures=M` line;
- has a cycle watchdog.

| testbench | covers |
|-----------|--------|
| `tb_dct_kernel_rom` | every kernel entry against the rounded formula |
| `tb_dct_compute_unit` | random and extreme rows, rounding, saturation |
| `tb_dct_buffer` | column and row writes, registered reads |
| `tb_maxc_unit` | diagonals, clear, a worked 5x5 example |
| `tb_sr_fsm` | every state against the model over random MaxC and tuples |
| `tb_sampling_rate_table` | reset sweep, both ports, read-during-write at 8100 entries |
| `tb_color_buffer` | superfragment access and upsampling at all levels |
| `tb_superquad_gen` | walk order, counts, positions, backpressure |
| `tb_freq_analysis_unit` | bit-exact coefficients through MaxC, decision and SRT write, latency, `cb_done` |
| `tb_dsr_raster_unit` | the whole unit end to end at default sizes |
| `tb_dsr_frame_row` | a workload: a full 120-tile screen row over 14 frames of a scrolling scene with a scene change at frame 8 |

The end-to-end test drives four tiles with different content over several
frames. Along the way it:

- checks every looked-up state, every flushed row and every analysis result;
- requires each mechanism to occur at least once: Reduce, Increase, Maintain,
  the forced 1/256x→1/64x step, all five rates, both stall kinds, flush and
  superquad backpressure, and blending reads.

The row workload prints the number of tiles at each rate and the average
sample rate (ASR, samples per pixel) for each frame. With `T_R = 2.0`,
`D_R = 1`, `T_I = 10.0` and `D_I = 1`:

- The row starts at ASR 1.0.
- Most of the smooth third of the row (30 of 40 tiles) reaches 1/64x by frame 3, and then
  alternates between 1/256x and 1/64x. The forced step up from 1/256x makes it
  bounce.
- The ASR settles near 0.67.
- After the scene change, those tiles return to 1x through Increase decisions
  within four frames.

The test checks every step bit-exactly against the reference models.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
        rtl/dsr_pkg.sv tb/dsr_ref_pkg.sv tb/tb_freq_analysis_unit.sv \
        --top-module tb_freq_analysis_unit
    ./obj_dir/Vtb_freq_analysis_unit

Files:

- Each file in `rtl/` holds one module or the package `dsr_pkg`.
- `dsr_raster_unit` is the top.
- All RTL also reads through the yosys slang front end.

Assertions (`assert property`) cover these rules:

- handshakes;
- address ranges;
- no Color Buffer writes during upsampling;
- a constant sampling level during a superquad walk.
