# Stream-based LiDAR ground segmentation in SystemVerilog

This is a synthesizable, streaming hardware design that labels every point of a LiDAR range image as ground or not ground. It handles one point per clock. The algorithm is channel-based:

1. Convert each point to polar form.
2. Repair missing ranges and pitches.
3. Compute the inclination angle α between vertically neighbouring points.
4. Seed the ground from the lowest valid point of each column.
5. Grow the ground region with a "cross-eight-way" flood fill. This runs as three chained passes.

The design follows the architecture of "Stream-Based Ground Segmentation for Real-Time LiDAR Point Cloud Processing on FPGA" (Zynq-7000 XC7Z045, 160 MHz). Where that description is silent or contradicts itself, the choices made here are listed below.

## Block diagram

```
load port ──► input_buffer ──► data_converter ──► frame_repair ──► alpha_compute ──► seed_init ──► flood_fill ×3 ──► labels
             (frame store,     (float xyz →       (11×1 line      (2×1 line buffer,  (first valid   (5×5 line buffer,
              bottom-up read,   r,p,y: CORDIC)     buffer, range   CORDIC sin/cos     point/column,  s1/s2 rule, fresh
              + flush beats)                       + pitch repair) + atan2)           COLS-bit flags) label FIFO)
```

`gs_top` wires these stages together and adds an output register. That register turns the stream row back into an image row, with 0 as the top channel.

## Files

| file | contents |
|---|---|
| `rtl/gs_pkg.sv` | number formats, CORDIC tables, the structs `polar_t`, `rp_t` and `apt_t`, and the latency/flush helpers |
| `rtl/line_fifo.sv` | one row of delay: a circular array with a write pointer and an asynchronous read of the slot about to be overwritten |
| `rtl/line_buffer.sv` | generic window generator: row FIFOs, shift registers, padding and position counters |
| `rtl/cordic_vec.sv` | pipelined vectoring CORDIC that gives atan2 and magnitude, with quadrant folding |
| `rtl/cordic_rot.sv` | pipelined rotation CORDIC that gives r·cos p and r·sin p |
| `rtl/input_buffer.sv` | frame memory, start/busy/done control, bottom-up streaming, flush beats |
| `rtl/data_converter.sv` | IEEE-754 single float to fixed point, then two CORDICs for yaw and pitch; has a polar bypass |
| `rtl/range_repair.sv` | combinational averaging of in-threshold upper/lower range pairs |
| `rtl/pitch_repair.sv` | last-valid-pitch buffer |
| `rtl/frame_repair.sv` | the repair stage: line buffer plus both repair units |
| `rtl/alpha_compute.sv` | α stage, including the copy of the top row |
| `rtl/seed_init.sv` | seed stage |
| `rtl/flood_fill.sv` | one flood-fill pass |
| `rtl/gs_top.sv` | the complete pipeline |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_gs_ref_pkg.sv` | scene generator and real-arithmetic reference model used by the top-level tests |
| `tb/tb_gs_top.sv` | end-to-end test at reduced size: 64 columns, up to 16 rows |
| `tb/tb_gs_full.sv` | end-to-end test at full default size: 32-, 64- and 128-channel frames of 2048 columns |

## Stream protocol

Every stage takes and produces *beats*. A beat is either a point (`vld`) or a flush beat (`flush`) that carries no data.

- Points arrive in row-major order, bottom channel first. The vertical index is inverted, as the algorithm requires, so the ground is met before what stands on it.
- Flush beats drive the line buffers after the last point of a frame. A stage that looks `A` rows and `H` columns ahead holds back `A·COLS + H` points. It consumes the same number of flush beats to emit them, then passes the remaining flush beats on.
- The source sends `flush_beats(COLS, ITERS) = 5·COLS + COLS + ITERS·(2·COLS + 2)` flush beats per frame.
- There is no back-pressure. Every stage accepts one beat per clock and has a fixed latency.

| stage | latency (cycles) | at COLS = 2048 |
|---|---|---|
| data_converter | 2·(24+1) + 4 | 54 |
| frame_repair | 5·COLS + 2 | 10242 |
| alpha_compute | COLS + 2·24 + 5 | 2101 |
| seed_init | 1 | 1 |
| flood_fill (each) | 2·COLS + 4 | 4100 |
| output register | 1 | 1 |
| total | | 24699 |

## Line buffer

`line_buffer` generalises the 3×3 example architecture to an `(BELOW+ABOVE+1) × (2·HR+1)` window.

- `ABOVE + BELOW` row FIFOs (`line_fifo`) hold earlier rows. `NR × NC` shift registers form the window.
- Row and column counters track the centre point.
- Padding zeroes the data and clears `win_ok` for any window position outside the frame. These positions are found from the centre's row and column, compared with the run-time `rows` and with `COLS`.
- The stages instantiate it as 11×1 (range repair), 2×1 (α) and 5×5 (flood fill).

## Number formats

- **Range:** signed 32-bit Q9.23, so up to 255 m.
- **Angles:** signed 32-bit with 24 fraction bits (radians).
- **CORDIC:** a 40-bit datapath with 24 iterations and a fixed gain correction.

The source names fixdt(1,32,24) for everything. It also states a 9/23 integer/fraction split for the range. The range follows the second statement.

## Stages

**Input buffer.** This is a `MAX_ROWS × COLS × 96` bit memory, written through a simple load port (`wr_en`, `wr_row`, `wr_col`, `wr_data`). Each word is either `{x, y, z}` in IEEE-754 single precision, or `{r, p, y}` in fixed point when `bypass` is set. On `start` the buffer streams rows `rows-1` down to 0, then the flush beats. `done` comes with the last flush beat.

**Data converter.** Each float is converted exactly to Q.23, with denormals flushed to zero and saturation. Then:

- Yaw is atan2(y, x) from a vectoring CORDIC. Its magnitude output gives K·ρ, the horizontal distance scaled by the CORDIC gain K.
- After gain correction, a second CORDIC gives the range and the pitch = atan2(ρ, z). Pitch is measured from the +z axis, so x_h = r sin p is horizontal and z = r cos p is vertical.

**Frame repair.** An 11×1 window (5 above, 5 below) feeds two units:

- **Range repair** (`range_repair`). All 25 upper/lower pairs are checked. A pair counts when both members are in the frame, both are valid (r > 0), and their difference is below `range_thresh`. An invalid centre is replaced by the mean of the counted pairs. The division is a reciprocal-table multiply, so no divider is needed.
- **Pitch repair** (`pitch_repair`). An invalid pitch takes the last valid pitch in scan order.

The output is `{ok, r, p}`. Yaw is not needed further.

**α compute.**

- A rotation CORDIC gives (r sin p, r cos p) for every point, before the line buffer.
- A 2×1 window gives the point and the one above it. Then α = atan2(|ΔZ|, |ΔX|), computed by a vectoring CORDIC and assigned to the lower point.
- The top image row has no upper neighbour. It receives a copy of the α of the row just below it, from a one-row history FIFO.

**Seed init.** The first point of each column with a valid α becomes a seed if α ≤ `seed_thresh`.

- A COLS-bit "already seen" buffer records which columns have been decided.
- Its meaning flips every frame, so the buffer never needs clearing. To keep the flip sound, every column is written on the last row of the frame.

**Flood fill.** Each pass uses a 5×5 window. Along each axis direction, with one-step neighbour s1 and two-step neighbour s2:

1. If |α_c − α_s1| ≤ T, the centre joins when s1 is ground.
2. Otherwise, if |α_s2 − α_s1| ≤ T and |α_c − α_s2| ≤ T, the centre joins when s2 is ground.

Labels of the points the pass has already produced (the two rows below and the two points to the left) come from a label FIFO of fresh results, not from the input. As a result, a single pass carries ground upward and to the right across the whole frame. `gs_top` chains `ITERS = 3` passes, and each pass reports the points it grew.

## Design choices not fixed by the source

- **Range repair size.** The algorithm section uses step 2 with window 5 and pairs equidistant from the centre. The hardware section uses step 5, an 11×1 window, and all 5×5 upper/lower pairs. The hardware version is built; `STEP` is a parameter.
- **Repair criterion.** One sentence of the source speaks of α differences between the pairs. The formula next to it, and the hardware section, use range differences. Range differences are used here, since α is not yet known at this stage.
- **Floating point.** The source keeps the polar conversion in floating point. Here the floats are converted to fixed point first and the trigonometry is done by CORDIC.
- **Seed rule.** The seed is the first valid point of the column, tested against the threshold. This follows the algorithm section, not the looser hardware wording.
- **Seen-flag polarity.** The "row parity" flip of the seen flags is read as a per-frame flip.
- **Thresholds.** No values are given for the three thresholds, so they are run-time inputs.
- **Channel count.** The number of channels is a run-time input up to `MAX_ROWS`, so one build serves 32, 64 and 128 channels.
- **Invalid points.** An invalid point is one whose range is ≤ 0. Such points never seed and never pass on ground.
- **Control.** Reset, the flush protocol and the load/start interface are this design's own.

## Verification

Each testbench checks its block against an independent model written in the testbench. It prints `TB_RESULT checks=N failures=M`, has a watchdog, and checks the latency the block promises.

- **End-to-end.** `tb_gs_top` and `tb_gs_full` build synthetic scenes: flat ground, a box, a thin pole, rough ground, a far wall and dropped points. They compare every output label with a real-arithmetic reference of the whole algorithm.
- **Mechanisms.** Both tests count how often each mechanism occurs and require every one to happen: range repair, pitch fill, top-row copy, seeds, growth through s1 and through s2, and growth in every pass.

Simulation with Verilator 5 (two-state):

```
verilator --binary --timing --assert rtl/gs_pkg.sv $(ls rtl/*.sv | grep -v gs_pkg) \
          tb/tb_gs_ref_pkg.sv tb/tb_gs_full.sv --top-module tb_gs_full -j 8
./obj_dir/Vtb_gs_full
```

The package must come first. A block test needs only the package, the block's files and its testbench; `tb_gs_ref_pkg.sv` is used only by the two end-to-end tests. `tb_gs_top` runs in well under a second. `tb_gs_full` simulates about 530 000 cycles at full size and takes a few seconds.

### Measured frame times (tb_gs_full, default parameters, 160 MHz)

| frame | cycles | time | published figure |
|---|---|---|---|
| 32 × 2048 (Cartesian input) | 90 237 | 0.564 ms | 0.54 ms |
| 64 × 2048 (Cartesian input) | 155 773 | 0.974 ms | 1.09 ms |
| 128 × 2048 (polar bypass) | 286 845 | 1.793 ms | 1.89 ms |

From `start` to the last label, a frame takes exactly `rows·COLS + 24 699 + 2` cycles. That is one clock per point, plus the pipeline latency, plus one cycle each for the start and for the store's read register. The test checks this count. `busy` falls with the last of the `12·COLS + 6` flush beats. The store takes writes only while idle. Loading the next frame therefore takes `rows·COLS` cycles, far more than the ~120-cycle pipeline tail, so in normal use frames never meet inside the pipeline. Re-starting the stored frame at once, without reloading it, would overlap two frames. This case has not been verified.

### Size

Coarse synthesis of `gs_top` at default parameters gives about 4 000 cells, 3 500 flip-flop bits, and 27.6 Mbit of memory.

- The 25.2 Mbit input frame store for 128 × 2048 points is larger than the 19.6 Mbit of block RAM on an XC7Z045. With `MAX_ROWS = 64` it fits.
- The line buffers themselves need about 2.4 Mbit.
- No place-and-route or timing closure has been done. The 160 MHz figure above is the target clock, not a measured Fmax.
