# On-FPGA molecular dynamics engine (SystemVerilog)

This is a synthesizable SystemVerilog model of a single-FPGA molecular dynamics (MD) engine. It
implements the configuration that the design this follows presents as its best one: "Design 6".
Design 6 uses distributed per-cell memories ("Mem 2") and gives each force pipeline its own
homecells ("Distribution 3"). One time step works in three parts:

- The range-limited (RL) Lennard-Jones plus short-range Coulomb forces, found with cell lists and
  filtering.
- The long-range (LR) electrostatics, as a particle-mesh charge grid.
- The bonded forces.

After the forces are summed, the motion update integrates each particle and moves it to the cell
it now belongs to.

## Top level: `rtl/md_top.sv`

| Part | Modules |
|---|---|
| Per-cell position/velocity caches, double buffered | `particle_cache` (one per cell) |
| RL pipelines (default 41) | `rl_unit` = `pair_generator` -> `filter_bank` (8 × `planar_filter` + `filter_arbiter`) -> `rl_force_pipeline` -> `ref_accumulator` |
| Per-cell RL force caches | `rl_force_cache` (one per cell) |
| Cell readiness | `scoreboard` |
| Force summation | `summation` |
| Integration and migration | `motion_update` |
| LR charge mapping | `grid_mapping` (12 × `basis_function`) -> `grid_memory` |
| Bonded forces | `bonded_unit` |
| Shared pieces | `md_pkg` (types, fp32 helpers), `rr_arb`, `sync_fifo`, `fp_add_pipe` |

How a step runs:

- `step_start` begins a step. Each pipeline p works through homecells p, p+41, p+82, …
- For each homecell, the pipeline pairs every particle with the particles of the homecell and
  its 13 "later" neighbour cells. This is the Newton's-third-law half shell.
- Cell reads go through one round-robin arbiter per cell.
- Neighbour forces are written, negated, into the neighbour's force cache. That cache has its own
  round-robin arbiter, because any pipeline may write to any cell.
- When a cell and its 26 neighbours are all done, the scoreboard hands the cell to the single
  summation pipeline. The summation adds RL + LR + bonded forces, and `motion_update` writes
  the new particle into the inactive buffer of its (possibly new) cell.
- When every cell is summed, all caches swap buffers and `step_done` pulses.

Interface groups, all plain ports:

- Control: `step_start`, `dt`, `step_done`, `busy`.
- Host load ports, used before a step:
  - `ld_*`: particles per cell and slot.
  - `tab_*` / `pc_*`: interpolation table and per-type-pair A/B/QQ.
  - `im_*`: inverse masses per type.
  - `pl_*` / `pm_*`: bond list and bonded position copy.
  - `q_*`: charge per type.
  - `bc_*`: basis-function coefficients.
- `fft_*`: the charge-grid access port for an external FFT, with `grid_clear` and `grid_clearing`.
- `lrf_*`: the LR force input.
- Observation outputs:
  - `mu_*`: each particle written by the motion update.
  - `cnt_stall`: cycles × pipelines that a pair generator was held back by full filter buffers.
  - `cnt_requeue`: force-cache hazard re-queues.
  - `cnt_migrate`: particles that changed cell.
  - `cnt_overflow`: cell-cycles with a full cell buffer.
  - `cnt_rdconf`: cycles that a pipeline waited for a cell's read port.

## Number formats

- Positions are 28-bit signed fixed point with 20 fraction bits (Å).
  - The planar filter works directly on this format.
  - r² is 32-bit fixed point with 24 fraction bits.
- Forces, velocities, masses, table coefficients and all force arithmetic are IEEE-754 single
  precision. The fp32 operators are this design's own, in `md_pkg`:
  - Normal numbers only. Zero and denormals flush to zero.
  - Rounding is by truncation.
  - Overflow saturates.
  - Each operator takes one cycle, so the force pipeline is 9 stages deep, where the original
    design has 14 stages built from vendor cores.

## Blocks

- **planar_filter**: three planar tests (Eq 17–19 of the design):
  - |dx|, |dy|, |dz| < rc.
  - The pairwise sums < √2·rc.
  - The total < √3·rc.

  Differences are wrapped for periodic boundaries first. The result is registered.
- **filter_arbiter**: the 8-step arbiter of the design. It picks the next non-empty filter buffer
  after the current grant. Step 7 ("if the grant is the MSB, keep it") is read so that the search
  wraps to the lowest valid buffer.
- **filter_bank**: 8 filters, each with its own buffer, feeding one pipeline through the arbiter.
  `almost_full` back-pressures the generator.
- **rl_force_pipeline**: computes F/r = A·r⁻¹⁴ + B·r⁻⁸ + QQ·r⁻³. Each r⁻ᵏ term uses first-order
  interpolation over 8 sections, with 256 intervals per section. The section comes from the
  leading one of r².
- **ref_accumulator**: the adder output feeds back to its input, with three circulating partial
  sums. The sums are added together when the reference particle changes. Each sum carries a PID
  tag so that short runs also work.
- **rl_force_cache**: a per-cell force cache. It runs a read-modify-write with a hazard check
  against the three particles in flight; a conflicting write is re-queued at the bottom of the
  input buffer. Reads by the summation clear the entry, using valid bits.
- **particle_cache**: two buffers selected by a bit. Reads return rows of 8 particles. Updated
  particles are appended to the inactive buffer.
- **scoreboard**: one entry per cell. An entry starts with its bit 27 set and shifts right once
  per finished cell among the 27. A round-robin request holder releases ready cells.
- **summation / motion_update**: sequential per-cell summation, then a leapfrog-style
  integration. Cell bounds are derived from the cell index. Positions that leave the box wrap
  around.
- **basis_function / grid_mapping / grid_memory**:
  - Each particle gives 3 × 4 third-order basis values; 12 units compute them.
  - These expand to 64 grid contributions, one particle per 4 cycles.
  - The grid memory is 16 interleaved banks of complex values. Bank = (y mod 4)·4 + z mod 4.
  - Clearing is sequential.
- **bonded_unit**: fetches a pair (gid i, gid j, k, r0) from the pair memory, then both
  positions. It computes F = −2k(r − r0)·r̂ and accumulates the result per gid.

## Differences from the source and things not built

- **Cell edge below the cutoff.** A 62.23 Å box cut 7×7×7 gives the quoted ~70 particles per
  cell, but the cells are only 8.89 Å wide, below the 9 Å cutoff. Pairs 8.89–9 Å apart that lie
  two cells apart are missed. The 7×7×7 default was kept because it matches the quoted density.
- **Basis-function coefficients.** The third-order basis functions as printed do not sum to one.
  The coefficients are therefore loaded through `bc_*` and not hard-wired.
- **"256 intervals"** is read as per section, and **arbiter step 7** as described above.
- **Force-pipeline latency** is 9 cycles, not 14 (single-cycle fp operators).
- **Not built:**
  - The 3D FFT and inverse FFT are vendor IP. The grid is brought out on the `fft_*` ports.
  - The LR force interpolation from the potential grid: its datapath is not given. LR forces are
    written into an LR force cache through `lrf_*`.
  - Angle and dihedral bonded terms: only bond stretching is built.
  - The second grid-mapping unit of Design 6: only one is instantiated.
- **Not part of this design:** the mux-tree/all-to-all distribution of the other designs.
- **This design's own choices:**
  - The read/write interconnect: per-cell round-robin.
  - The step controller with an 8-cycle drain.
  - The LR particle scan.
  - The 128-slot cell capacity.
  - The 64³ grid.

## Workloads

- **DHFR (23,588 atoms, 9 Å cutoff): fits the defaults.**
  - The box size (62.23 Å) and the 64³ grid come from general knowledge of this benchmark, not
    from the source.
  - 343 cells × 128 slots, with about 69 particles per cell.
  - gid width 15 bits.
- **Synthetic datasets.** None fits the defaults as-is:
  - Datasets 1 and 3 (80 per cell) need different cell counts (`NCX/NCY/NCZ`).
  - Datasets 2, 4 and 6 (400+ per cell) exceed 128 slots per cell.
  - Datasets 5 and 6 (50,000 particles) exceed the 15-bit gid.

## Testing

Every block has a self-checking testbench in `tb/`. Each compares the block with a behavioural
model: a real-valued force, interpolation and integration reference in `tb_util_pkg`, or exact
integer models. Inputs are random (`$urandom`), and each testbench has a watchdog. Each prints
`TB_RESULT checks=… failures=…`.

Each block was also run against a deliberately broken copy of itself, and every broken copy
produced failures.

End-to-end testbenches:

- `tb_md_top` uses 3×3×3 cells, 4 pipelines, a 16³ grid and about 750 particles, over 2 steps.
  - It checks every integrated particle against a model of the pair forces, grid charge,
    migration and the step sequence.
  - It fails if any counted mechanism never happens: stalls, re-queues, migrations or read
    conflicts.
- No testbench runs `md_top` at its default size: 7×7×7 cells, 41 pipelines, 23,588 particles
  and a 64³ grid. Compiling that instance for simulation alone took more than 25 minutes.
  The largest size simulated is `tb_md_top`'s: 3×3×3 cells, 4 pipelines, a 16³ grid,
  about 750 particles and 2 time steps. At the full size, the default configuration has only
  been linted and elaborated.
