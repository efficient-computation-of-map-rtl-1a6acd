# A 16-core FCMI accelerator for map-scale mutual information

A robot that explores has to decide where to look next. A common way to do
that is to compute, for every cell of its occupancy grid, the mutual
information (MI) between the map and a range scan taken from that cell. The
robot then moves toward cells with high MI. The Fast Continuous Mutual
Information (FCMI) formulation makes this cost O(|Θ|·H²) for an H×H map and
|Θ| ray angles. It does so by walking each ray across the whole map once
and updating four running expectations (α₁, β₁, α₀, β₀) cell by cell. Each
cell's contribution to its own MI follows from those values.

This RTL maps that recursion onto 16 pipelined cores fed from a banked
on-chip memory. Every cycle, each core takes in one cell of one ray and
writes one updated MI word. With 16 cores at 100 MHz, the MI map of a
201×201 grid with 60 ray angles is done in 160,226 cycles (1.60 ms). The
ideal bound is H²|Θ|/16 cycles (1.52 ms).

The design has three ideas that work together:

1. **Ray groups.** All 16 cores walk rays of the *same angle*. Their origins
   are 16 consecutive cells on one map edge. So in any cycle the 16 cells
   being processed are 16 consecutive cells of one row or column.
2. **Diagonal banking.** Cell (x, y) lives in bank (x + y) mod 16. Any 16
   consecutive cells of a row or column then fall in 16 different banks, so
   all cores are served in the same cycle.
3. **Ray interleaving.** Each core's recursion loop is 8 pipeline stages
   long. Each core therefore works on 8 rays in turn, and every ray takes
   one step every 8 cycles. The loop never waits for its own result.

## Block structure

```
 host ──► control_fsm ──► ray_caster ──(cmd: one step of one slot)──┐
              │                                                     ▼
              │ pad size, clear                       atu[0..15] (cell → bank, word)
              ▼                                                     │ req
        mem_subsystem: xbar_req ─► occ_bank[16], mi_bank[16] ─► xbar_resp
                                   ▲ MI write (R+19)         │ occ (R+1), MI (R+18)
                                   └──── fcmi_core[0..15] ◄──┘
```

| Module | Role |
|---|---|
| `fcmi_top` | Wiring, host ports, per-core alignment registers |
| `control_fsm` | Configuration registers, clear / run / drain sequencing, ray-group hand-out |
| `ray_caster` | One Bresenham walker, time-multiplexed over 8 slot contexts |
| `atu` | Per-core cell coordinate, wrap-around, bubble / reset decisions, bank and word address |
| `xbar_req`, `xbar_resp` | Request decoder (16 requesters → 16 banks) and data multiplexer |
| `occ_bank`, `mi_bank` | One bank each: 16384 words of 8-bit occupancy code or 32-bit MI |
| `mem_subsystem` | The 32 banks, both crossbars, delay lines for the MI read/write, host and clear access |
| `fcmi_core` | 19-stage core: `core_lut`, `fcmi_preprocess`, `fcmi_feedback`, `fcmi_postprocess` |
| `exp_pwl` | Piecewise-linear e^(−x) |
| `fcmi_pkg` | Types, constants, fixed-point multiply, bank/address functions |

## Ray groups, slots and wrapping

Each angle table entry gives:

- the major axis (x or y)
- the two step directions
- integer Bresenham deltas, with dmin ≤ dmaj
- the cell width w, which is the ray length per major step (1/cos of the
  angle to the major axis)

The host computes these entries.

A *ray group* is 16 rays of one angle. Their origins are minor coordinates
`base … base+15` on the edge where the major coordinate starts. The map is
padded to a multiple of 16 in each dimension, so an angle has
`padded_minor/16` groups. The groups of one angle together start a ray at
every edge cell.

The ray caster has 8 slot contexts. In cycle t, slot t mod 8:

- emits the current major step and minor offset, which all 16 ATUs share
- advances its Bresenham error term, which starts at err₀ = 2·dmin − dmaj

When a slot's walk is finished, it takes the next group in the same turn.
So all 8 slots stay busy until the groups run out. Slots can hold groups of
different angles at the same time. This is allowed because the cores keep a
separate state for each slot.

The minor offset is kept modulo the padded minor size. A ray that leaves the
map on one side continues from the opposite side, and every group walks
exactly as many steps as the map is long on the major axis. This *wrapping*
is what balances the work. Without it, rays near a corner would be short and
their cores would sit idle.

When the wrapped coordinate falls in the padding, the ATU marks the cell as
a bubble. A bubble does no memory access, and its pipeline slot carries the
ray's state around the loop unchanged. The ATU raises `ray_reset` in three
cases:

- on a ray's first cell
- on the first cell after a wrap
- on the first cell after leaving the padding

On `ray_reset`, the core starts that ray's expectations from zero. Each
contiguous piece of a wrapped ray is therefore a separate ray from an edge
cell, which is what the FCMI sum over edge origins asks for.

Per angle this costs `ceil(groups/8)·8·H` cycles. The run is ordered by
angle and the rounds over all angles are packed, so the total is:

```
cycles ≈ H·ceil(W/16)           (MI clear)
       + ceil(|Θ|·groups/8)·8·H (ray walking)
       + ~30                    (start / drain)
```

## Memory timing and the bypass

Each cell is touched three times:

| Cycle | Access |
|---|---|
| R | The ATU issues (bank, word) to the occupancy banks |
| R+1 | The occupancy code reaches the core |
| R+18 | The same bank/word is read from the MI bank. A delay line in `mem_subsystem` carries bank, word and core index. |
| R+19 | The core's updated MI is written back. A second delay line routes the write. |

Each MI bank does one read and one write per cycle, using its two ports. The
same cell can be read for one ray in the cycle in which another ray writes
it. The slots hold different rays, and when the map is short they can cross
the same cell 8 cycles apart. For that case `mi_bank` forwards the word
being written (write-first). The `bypass` output of the top level pulses
whenever this happens.

An immediate assertion in `xbar_req` checks that no two requests ever reach
one bank in a cycle. A concurrent assertion in `fcmi_top` checks that each
core's MI write lines up with the write slot the memory side expects.
Because conflicts cannot occur, there is no stall logic.

## The core and its arithmetic

All values are signed 32-bit fixed point with 12 fractional bits (Q20.12).
A product keeps bits [43:12] of the 64-bit result (truncation, no
saturation).

| Stages | Section | Work |
|---|---|---|
| 1 | interface register | valid, ray reset, cell width, occupancy |
| 2 | `core_lut` | 101-entry ROM → λ_m, −log λ_m, 1/λ_m |
| 3–10 | Preprocess | L = λ_m·w, E = e^(−L), γ₁ = 1−E, γ₂ = 1−E(1+L), γ₃ = 2−E(L²+2L+2), and the ray-independent terms t_a = (γ₃ − γ₂ log λ_m)/λ_m, t_b = γ₂/λ_m, t_c = γ₂ − γ₁ log λ_m, t_d = γ₁ |
| 11–18 | Feedback | α₁ = E((α₁′ + Lβ₁′) + w(α₀′ + Lβ₀′)) + t_a, β₁ = E(β₁′ + wβ₀′) + t_b, α₀ = E(α₀′ + Lβ₀′) + t_c, β₀ = Eβ₀′ + t_d |
| 19 | Postprocess, registered by the MI write | MI += Δθ·(α₁ + (ln Λ − 1)·β₁), Λ = 10⁷ |

Only the Feedback section depends on the previous cell. Its state for each
of the 8 slots lives in the 8 pipeline registers of that section. The input
mux at stage 11 chooses between:

- the state coming back from stage 18, for the ray's next cell
- zero, when `ray_reset` is set

A bubble passes the state from stage 18 back to stage 11 unchanged. This is
why the section must be exactly 8 registers deep.

The occupancy codes 0…100 stand for o = code/100. The table (`rtl/occ_lut.hex`)
holds λ = −ln(1−o), −ln λ and 1/λ, each rounded to Q12. Two codes are
special:

- **o = 0**: all three entries are zero. The Preprocess section
  recognises λ = 0 and sets E to exactly 1, not the exponential's value at
  0 (0.983). All γ terms are then 0, and the cell passes the ray state on
  untouched.
- **o = 1**: λ is infinite. The ROM stores λ = 8, −log λ = −ln 10⁷ and
  1/λ = 0. A separate *full* flag forces E = 0, so no probability mass
  passes the cell.

`exp_pwl` evaluates e^(−x) on [0, 8] with 16 pieces of width 0.5. The slope
and intercept of each piece are the least-squares fit over that piece,
rounded to Q12. Arguments outside [0, 8] are clamped, and the result is
never negative. For x < 4, the worst relative error, including the 1-LSB
quantization of the output, is 3.45%. The table for this block and the LUT
are the only constants derived offline, by these formulas.

## Accuracy

Outside the two degenerate codes, the arithmetic error comes almost entirely
from the exponential. The γ terms are differences such as 1 − E(1+L) and
2 − E(L²+2L+2). For small L = λw they are much smaller than E itself, so a
small absolute error in E becomes a large relative error in them.

`tb_fcmi_accuracy` compares the MI map with a double-precision evaluation
of the same recursion over the same cells. It uses a synthetic 201×201 map
of a partly explored building with 60 rays. Both maps are normalised to
[0, 1]. The results depend on the occupancy values:

- **Occupancies on a 0.1 grid.** Free cells at 0, 0.1 and 0.2, unknown
  cells at 0.5, walls at 0.9 and 1. The largest difference is 0.008. The
  testbench checks that it stays below 0.05.
- **Finer free-space codes, 0.01…0.06.** The largest difference rises to
  about 0.10. The hardware also overstates the MI peak by about 25%. The
  testbench only reports this case.

A user who needs accurate MI near almost-free cells should either keep the
occupancies on a 0.1 grid or give the first exponential pieces a finer fit.

## Host interface (`fcmi_top`)

1. While `busy` is low, do the setup in any order:
   - write the angle table with `cfg_we`, `cfg_idx` and `cfg_data` (an
     `angle_cfg_t`)
   - set `map_w`, `map_h` (1…512), `n_rays` (≤ 64) and `dtheta` (Q20.12)
   - load the occupancy codes with `occ_we`, `host_x`, `host_y` and
     `occ_wdata`
2. Pulse `start`.
3. The accelerator clears the MI map and walks every group of every angle.
   Then it pulses `done`.
4. `cycles` holds the length of the run.
5. Read the MI map with `mi_re`, `host_x` and `host_y`. `mi_rdata` is
   valid one cycle later.

All host accesses are meant for idle periods.

## Where this design departs from, or adds to, the description it follows

- **No stalls.** The description only says that conflicting cores would
  stall. Here, padding plus (x+y) mod 16 banking makes conflicts impossible,
  so no stall path was built.
- **Padding and wrap rule.** Padding to a multiple of 16 is this design's
  choice. So is the rule that a ray restarts after each wrap and after each
  stretch of padding.
- **MI clear phase.** H·ceil(W/16) cycles at the start, about 2.6k cycles
  for 201×201. Together with the idle slots of the last round, it explains
  the 1.60 ms here against the 1.55 ms reported for the original
  implementation.
- **Signal routing.** The published block diagram draws three wires
  straight from the control FSM: cell width and ray reset to the cores, and
  the ray origin to the ATUs. Here each of these signals travels with the
  ray caster's per-cycle command. The control FSM is still where the angle
  table (and so the width) and the group origins come from. The reason is
  that consecutive cycles belong to different slots, so different groups
  and possibly different angles. Ray reset is decided per core in its ATU,
  because each core's ray wraps at its own step.
- **Pipeline split.** The stage split 1 / 2 / 3–10 / 11–18 / 19 follows the
  published figure. The order of operations inside Preprocess is this
  design's.
- **Fine occupancy codes.** With codes below 0.1, the accuracy is worse
  than the description reports (see Accuracy).
- **Reset values.** The feedback reset values are zero, and the pre-computed
  values for o = 0 and o = 1 are the ones given above. The description
  names them but does not give them.
- **Number of levels.** The description says 101 occupancy levels but
  writes the set with a step of 0.1. This design uses 101 levels with a
  step of 0.01.
- **λ_m versus λ.** λ_m is used everywhere in the recursion, including the
  α₁ term, where the published equation writes λ.
- **Δθ applied once.** The published equations multiply by the angular
  step both in the sum over rays and inside the per-ray entropies. It is
  applied once per ray update here.
- **Cell width per angle.** The cell width is given per angle by the host.
  It is not computed on chip.
- **Fixed configuration.** The configuration is fixed at 16 cores. The
  published sweep over core counts is not reproduced.

## Simulation

Each block has a self-checking testbench `tb/tb_<module>.sv`. It prints
`TB_RESULT checks=… failures=…`. The end-to-end tests compare every MI word
with `tb/fcmi_ref_pkg.sv`, a plain sequential model that walks each ray from
each edge origin:

- `tb_fcmi_top` uses a 24×24 map and 12 rays. It checks the cycle count and
  counts the following events, failing if any never happens: ray resets,
  wraps, bubbles, bypasses, cycles with all 8 slots busy, slots on mixed
  angles, clear cycles, o = 0 cells and o = 1 cells.
- `tb_fcmi_accuracy` runs the accuracy comparison described above.
- `tb_fcmi_full` runs the default-parameter design on 201², 256² and 512²
  maps with 60 rays. Results:

  | Map | Cycles | Time at 100 MHz |
  |---|---|---|
  | 201² | 160,226 | 1.602 ms |
  | 256² | 249,889 | 2.499 ms |
  | 512² | 999,457 | 9.995 ms |

  The published figures for these three sizes are 1.55, 2.51 and 10.1 ms.
  The run takes about 15 s in Verilator.

Running `tb_fcmi_full` from the project root:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/fcmi_pkg.sv tb/fcmi_ref_pkg.sv rtl/*.sv tb/tb_fcmi_full.sv \
  --top-module tb_fcmi_full -Mdir obj_full
./obj_full/Vtb_fcmi_full
```

Substitute another testbench name to run it. The LUT is read at
elaboration as `rtl/occ_lut.hex`, relative to the working directory. The
`LUT_FILE` parameter changes that path.

To change the design:

- `fcmi_pkg` holds the sizes: `MAX_DIM`, `PITCH`, the address width and the
  number format.
- `N_CORES = 16` and `N_SLOTS = 8` are tied to the bank count and to the
  feedback depth. Changing either means changing the banking function and
  the Feedback section together.

Synthesized with Yosys, the top level comes to about 6.5k cells and 28.6k
flip-flop bits, plus 10.5 Mbit of bank memory. Of that memory, 16 × 16384 ×
32 bits is MI and 16 × 16384 × 8 bits is occupancy.
