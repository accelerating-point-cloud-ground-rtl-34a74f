# Parallel ground segmentation for a MEMS solid-state lidar

A MEMS solid-state lidar like the Robosense M1 delivers a frame that is really
five rectangular subframes, 126 scan lines by 125 points each. Its edges
overlap slightly, and every second scan line is swept backwards. This design
separates ground from non-ground points by treating each subframe as its own
small range image. It runs an elevation-angle ground segmentation on every
subframe independently, on as many processing units as the area budget
allows. Cutting the frame along its natural seams costs little accuracy for
range-image methods. It shortens every line buffer five times, and it lets
units work side by side.

The architecture follows "Accelerating Point Cloud Ground Segmentation: From
Mechanical to Solid-State Lidars" (Zhang, Huang, Garcia, Huang). That paper
gives the frame geometry, the five-slice split, the number of processing units
(three in its main configuration) and the steps of the algorithm by name. It
does not give the inside of the steps. The arithmetic, seed and propagation
rules, memory organisation and interfaces here are this design's own. Each is
marked as such below and at the top of every source file.

## Data flow

```
 point stream ─► frame_reorg ─► frame_buffer (5 banks) ─┬─► slice_pu 0 ─┐
 (78,750 pts,     zig-zag        one bank per           ├─► slice_pu 1 ─┼─► label_mask_buffer ─► host read
  sensor order)   undone         subframe               └─► slice_pu 2 ─┘    (1 bit per point)
                                      ▲
                               pu_scheduler: round 0 = subframes 0,1,2
                                             round 1 = subframes 3,4
```

| Module | Role |
|---|---|
| `gseg_pkg` | Shared types (`point_t`, `angle_t`, row/column tags), frame geometry, default thresholds |
| `gseg_top` | The accelerator |
| `frame_reorg` | Counts incoming points and turns each into a bank and address, undoing the zig-zag |
| `frame_buffer` | Organized frame: five banks of 15,750 points, one read port per unit |
| `pu_scheduler` | Gives subframes to units in rounds |
| `slice_pu` | One processing unit: a reader and a four-stage streaming chain |
| `frame_repair`, `elevation_matrix`, `value_smoothing`, `label_propagation` | The stages of that chain |
| `cordic_vec` | Pipelined CORDIC (vectoring mode) used twice by `elevation_matrix` |
| `label_mask_buffer` | Ground mask of the whole frame |

## The frame and its reorganisation

Points arrive as one sequence of 5 × 126 × 125 = 78,750 points. Subframe 0
comes first, then subframes 1 to 4. Inside a subframe the points come scan
line by scan line. Counting lines from zero, the even lines run left to right
and the odd lines run right to left. `frame_reorg` keeps three counters:
subframe, line, and position in the line. It writes each point to bank =
subframe and address = line × 125 + column. On odd lines the column is
124 − position. The paper says only that the "even rows" were reorganized. Here
that means the 2nd, 4th, … lines counting from one. If your sensor differs,
flip the test on `row_q[0]`.

A point is `{valid, x, y, z}`: signed 20-bit millimetres, with `valid = 0` for
a missing return. This format is this design's choice.

## One processing unit, one streaming pass

This is the part that takes most care. The ground label of a point depends on
the labels below it, because ground grows upward from the bottom of the
image. `slice_pu` therefore reads its subframe **bottom-up**: line 125 first,
left to right inside a line. Everything then happens in a single pass at one
point per clock, with no frame-sized intermediate storage.

Every beat in the chain carries a signed row tag and a column tag. Two stages
need the row *above* the current one. Going bottom-up, that row arrives one
line later, so each of these stages holds one line in a line buffer. It emits
the result for line r when line r−1 arrives. Each such stage therefore
relabels its output as `row + 1`, and its first input line produces nothing.
Two such stages in a row need two extra lines at the end. The reader appends
two **padding lines**, tagged −1 and −2, whose points are invalid:

| Stage | Needs | Input rows | Output rows | Line buffers |
|---|---|---|---|---|
| reader + memory | – | – | 125 … 0, −1, −2 | – |
| `frame_repair` | left neighbour | 125 … −2 | same (latency 1) | – |
| `elevation_matrix` | point above | 125 … −2 | 125 … −1 | 1 line of (ρ, z, valid) |
| `value_smoothing` | angle above and below | 125 … −1 | 125 … 0 | 2 lines of angles |
| `label_propagation` | label below and left | 125 … 0 | same (latency 1) | 1 line of (label, angle, seen) |

A subframe takes (126 + 2) × 125 = 16,000 read cycles plus 41 cycles of
pipeline. Done pulses with the label of line 0, column 124, 16,041 cycles
after start.

### Repair

A missing point takes the value of the last valid point to its left in the
same line. A line that starts with missing points keeps them missing. The
paper only names a repair step, so this rule is the simplest one that fills
isolated dropouts.

### Elevation angle

For a point and the point one line above it:

    α = atan2(|z − z_above|, |ρ − ρ_above|),   ρ = sqrt(x² + y²)

Flat ground gives α ≈ 0° and a wall gives α ≈ 90°. The first CORDIC computes
K·ρ, where K = 1.64676 is the CORDIC gain. The height difference is multiplied
by K (26981/2¹⁴) so both legs share one scale. A second CORDIC then gives the
angle. Angles are 16-bit, 65,536 units per full turn, and lie between 0 and
16,384 (90°). The CORDICs carry 8 fractional guard bits, so legs only a few
millimetres long still give angles within a few units. A point whose upper
neighbour is missing, or that sits on line 0, has no valid angle.

### Smoothing

Each angle becomes (α_below + 2α + α_above)/4 along its column. A missing
neighbour is replaced by the centre value. The paper names a "value smoothing"
module for the angle matrix but gives no kernel. The column direction follows
the range-image method the paper builds on.

### Seeds and propagation

A point with a valid smoothed angle is ground when any of these holds:

* **seed**: it is the lowest point of its column with a valid angle, and that
  angle is below `init_th`;
* **below**: the point under it is ground and the two angles differ by less
  than `delta_th`;
* **left**: the point to its left is ground and the two angles differ by less
  than `delta_th`.

Both neighbours are decided before the current point, so one pass is enough.
The paper describes this step as a pipelined "one-pass" propagation, while
its algorithm listing iterates propagation `numIter` times. This design
follows the one-pass description. Ground spreads up and to the right, never to
the left. A patch that can only be reached from the right stays non-ground.
The defaults are `init_th` = 30° (5461) and `delta_th` = 5° (910). The paper
gives no values for either. Both are run-time inputs.

## Scheduling and memories

`pu_scheduler` runs ceil(5 / NPU) rounds. In round k, unit p gets subframe
k·NPU + p, and the next round starts when every unit of the current one has
reported done. Three units need two rounds, and the third unit idles in the
second. One to five units give 5, 3, 2, 2 and 1 rounds, so a fourth unit
buys nothing over three. The paper names three units as its balance between
execution time and resources.

`frame_buffer` has a bank per subframe, so units read different subframes in
the same cycle. Each bank's single read port takes the address of the unit
whose subframe index selects it. `label_mask_buffer` is banked the same way,
with one bit per point. An assertion in each checks that no two units touch
the same bank.

A frame is loaded completely before processing starts. While it is processed,
`pt_rdy` is low. Loading and processing do not overlap: the paper does not say
how frames enter the accelerator, and this is the simplest safe choice.

## Interface of `gseg_top`

| Port | Dir | Meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset (control state only) |
| `pt_vld`, `pt`, `pt_rdy` | in/in/out | point stream in sensor order; a point is taken when both valid and ready are high |
| `init_th`, `delta_th` | in | thresholds in angle units; hold them while `busy` |
| `busy`, `done` | out | frame being processed; one-cycle pulse when its labels are all written |
| `proc_cycles` | out | cycles from the last point written to `done` |
| `round` | out | current scheduling round |
| `rd_en`, `rd_sub`, `rd_row`, `rd_col`, `rd_label` | in/out | label readout, data one cycle after `rd_en` |
| `ev_fixed`, `ev_seed`, `ev_below`, `ev_left` | out | per-unit event flags (repaired point, seed, propagation from below, from the left) |

Parameters: `NSLICE` (5), `NPU` (3), `NROWS` (126), `NCOLS` (125). Every
default is the paper's number. The 7-bit column tag limits `NCOLS` to 128, and
the 8-bit signed row tag, which must also hold the padding rows −1 and −2,
limits `NROWS` to 127. Widen `row_t`, `col_t` and the 7-bit row ports for
larger subframes.

## Performance against the paper

At the defaults one frame takes 32,084 cycles from the last point written to
`done`. That is two rounds of 16,041 cycles, or 0.19 ms at the 167.54 MHz the
paper's implementations met. The paper reports 0.28 ms for its three-unit
design and 0.137 ms for a single unit on one subframe. Here one subframe takes
0.096 ms. Loading the frame takes another 78,750 cycles at one point per
clock, which these figures do not include. No FPGA timing closure was
attempted, so 167.54 MHz is the paper's number, not a property this RTL has
been shown to meet. Area was not compared with the paper's resource table.

The unit count is a parameter. Simulated on the same full-size frame:

| `NPU` | Rounds | Cycles, last point to `done` | At 167.54 MHz |
|---|---|---|---|
| 1 | 5 | 80,210 | 0.48 ms |
| 2 | 3 | 48,126 | 0.29 ms |
| 3 (default) | 2 | 32,084 | 0.19 ms |
| 4 | 2 | 32,084 | 0.19 ms |
| 5 | 1 | 16,042 | 0.10 ms |

## Where this design departs from or goes beyond the paper

* The paper names frame repair, elevation-matrix computation, seed selection,
  label propagation and value smoothing. Every rule and formula inside those
  steps is this design's.
* Propagation is a single pass over the below and left neighbours. It does not
  reproduce the iterative propagation of the paper's algorithm listing.
* The non-sliced baseline unit (whole 126 × 625 frame) is not built. It would
  be `slice_pu` with `NCOLS = 625` and wider column tags.
* How frames arrive and how labels leave are not described in the paper. The
  stream input and the read port are placeholders for whatever the system
  provides.

## Simulation

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. `tb_ref_pkg` is shared by the system-level
tests. It ray-casts a synthetic scene: flat ground 1.8 m below the sensor, a
4° slope in the odd subframes, low walls in the even ones, a backdrop and 3 %
dropouts. It also labels that scene in floating point with the same rules.
Because CORDIC rounding can flip a decision that sits exactly on a threshold,
the reference is evaluated at both threshold − 60 units and threshold + 60
units. Only points on which the two agree are compared; a few hundred of
157,000 are skipped.

* `tb_gseg_top`: full default size, two frames, every label read back. It
  checks the cycle count against the two-round schedule and against 0.28 ms
  at 167.54 MHz. It requires repair, seeds, both propagation directions, a
  second round, input hold-off, a threshold change and rejected points to have
  happened. It takes about 1 s.
* `tb_gseg_pu_sweep`: accelerators with one to five units fed the same
  full-size frame. They must produce identical masks that match the
  reference, and take the number of rounds in the table above.
* `tb_slice_pu`: one unit on two full-size subframes, with latency and
  coverage checks.
* The stage testbenches (`tb_frame_repair`, `tb_elevation_matrix`,
  `tb_value_smoothing`, `tb_label_propagation`) compare against bit-exact
  integer models, except the elevation angle, which is compared to `atan2`
  within 0.11°. `tb_frame_reorg`, `tb_frame_buffer`, `tb_pu_scheduler` and
  `tb_label_mask_buffer` cover the rest.

To run one with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/gseg_pkg.sv tb/tb_ref_pkg.sv tb/tb_gseg_top.sv --top-module tb_gseg_top
./obj_dir/Vtb_gseg_top
```

Replace `tb_gseg_top` with any other testbench name. `tb_ref_pkg.sv` is only
needed by the testbenches that import it.
