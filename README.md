# Tiled particle-in-cell step on an FPGA: particle advance and particle sort

A 2-D electromagnetic particle-in-cell (PIC) code spends most of its time on the
particles. Each time step, every particle reads the field around it, is pushed and
moved, and deposits the current its motion carries. This RTL moves that particle
work onto an FPGA. The grid work (reducing the current over tile borders, filtering,
advancing E and B) stays on the host CPU.

The design relies on one idea: **tiling plus keeping the particles sorted by tile**.
- The grid is cut into 25 x 25-cell tiles.
- The particle array is kept ordered so that the particles of each tile are
  contiguous.
- One tile at a time, the accelerator copies that tile's fields into on-chip
  memory. It runs all of the tile's particles against that copy and accumulates
  their current on chip. Then it adds the tile's current to the global array in one
  sequential sweep.

Random accesses per particle therefore only hit on-chip RAM, and external memory only
sees streams. The price: after every step, some particles have left their tile. A
second unit restores the order, moving only the particles that are out of place.

The design has two compute units that run one after the other in each time step:

| unit | module | what it does |
|---|---|---|
| particle advance | `particle_advance_cu` | per tile: load fields, advance particles on 2 lanes, add current to global memory |
| particle sort | `particle_sort_cu` | count per tile, rebuild the tile bookmarks, register and exchange the out-of-order particles |
| time step | `zpic_fpga_top` | starts the advance, signals `adv_done`, starts the sort, signals `done` |

`adv_done` rises as soon as the global current is complete. From then on the host
can reduce, filter and advance the fields while the FPGA sorts.

## Data in global memory

Every array lives in external memory. The units address it in words through the
`*_base` arguments:

| array | word | layout |
|---|---|---|
| particles | `part_t`, 192 bit | `ix, iy` (16-bit cell), `x, y` (position in the cell, [0,1)), `u` (3 momenta); sorted by tile |
| `tile_offset` | 32 bit | tile `t` owns particles `tile_offset[t] .. tile_offset[t+1]-1`, `n_tiles+1` entries |
| E/B | `emf_t`, 192 bit | one point holds all six components |
| current J | `vec3_t`, 96 bit | Jx, Jy, Jz |
| `target_idx`, `source_idx` | 32 bit | sort bookkeeping, one entry per particle |
| scratch | `part_t` | sort exchange buffer, up to one entry per particle |

The grid arrays are stored row by row, with **nx+3 points per row and ny+3 rows**.
Each grid dimension has 3 ghost points: 1 before the interior and 2 after it. Tile
`(tx, ty)` uses the 28 x 28 points starting at padded point `(25 tx, 25 ty)`.
Neighbouring tiles therefore overlap by three points. A particle in interior cell `i`
lies at padded point `i+1`. It reads the fields of points `i .. i+2`, and after moving
at most one cell it writes current to points `i .. i+3`. That is why 1 ghost point
before and 2 after are enough. The host folds the ghost rows and columns back into
the interior (periodic wrap); that is the "current reduction" step of the time step.
The tile index of a particle is `(iy/25)*ntx + ix/25`. nx and ny must be multiples
of 25.

All arithmetic is **fixed point: 32-bit two's complement with 24 fraction bits**
(`fx_t`). Fixed point gives one simple adder per accumulate, and it keeps all
of the datapath plain synthesizable RTL. The published design uses FP32. It spends its 6-cycle
update budget (below) on a floating-point multiply-add.

## Particle advance unit

For each tile in order, three stages run one after the other:

1. **Load**: 784 field reads are streamed, one per cycle, into
   `tile_field_buffer`.
2. **Advance**: the tile's particles are read two at a time in one wide request.
   Each of the two `advance_lane`s gets one of them. The updated pair is written
   back in place. If the tile has an odd number of particles, the write mask
   drops the unused slot.
3. **Store**: for each of the 784 points, the global current is read, the local
   current is added, and the sum is written back, one point per cycle. Reading a
   point also clears it locally, so the buffer is ready for the next tile.

Read responses wait in small FIFOs (`sync_fifo`). The unit never has more reads in
flight than it has buffer space. For stages 1 and 3 to keep their one point per
cycle, `FIFO_D` must exceed the memory round trip.

### Why a lane takes a particle only every 6 cycles

Two particles that follow each other in the pipeline can deposit into the same grid
point. A deposit is a read-modify-write of on-chip RAM. The next particle may
therefore only enter once the previous one's write has landed, which gives an
initiation interval of 6 cycles. In this RTL, `advance_lane` is written as six phases:

| phase | work |
|---|---|
| 0 | accept a particle |
| 1 | address the 3x3 field window around its cell |
| 2 | interpolate E and B (`field_interp`) and run the Boris push (`boris_pusher`), registered |
| 3 | split the motion and compute its currents (`vb_deposit`), registered |
| 4 | issue up to 12 accumulates and return the updated particle |
| 5 | accumulates land (the 2-cycle read-add-write of `current_buffer`) |

Throughput is what the published design reports: one particle per lane every
6 cycles. Its 513-cycle pipeline depth is a property of deep FP32 HLS pipelines and is
not reproduced here.

### Current deposit: three movements, twelve copies

The current is deposited with the charge-conserving scheme of Villasenor and
Buneman (`vb_deposit`). The particle is a unit square of charge. While it stays
inside one cell, its motion from `(x0,y0)` by `(dx,dy)` carries current through four
cell edges. With `(xm, ym)` the midpoint of the motion:

```
Jx1 = qnx*dx*(1-ym)   Jx2 = qnx*dx*ym     (bottom / top x-edges)
Jy1 = qny*dy*(1-xm)   Jy2 = qny*dy*xm     (left / right y-edges)
```

When the motion crosses a vertical and/or a horizontal cell edge, it is cut at the
crossings into one, two or three **basic movements**, each confined to one cell.
With two crossings, the earlier one (the smaller fraction of the step) comes
first. The hardware always computes all three movements and flags the ones in use.
Each movement writes four values into the 2x2 grid points around its cell:

| corner k | point | current deposited |
|---|---|---|
| 0 | (i, j) | Jx1, Jy1, Jz00 |
| 1 | (i, j+1) | Jx2, Jz01 |
| 2 | (i+1, j) | Jy2, Jz10 |
| 3 | (i+1, j+1) | Jz11 |

The three movements can hit the same grid point, and all twelve values of a
particle are written in the same cycle. Each lane therefore has **12 copies** of the
tile current, in separate RAMs. Copy `4*m + k` receives movement `m`'s corner `k`,
so no two writes ever collide. Stage 3 adds the 12 copies of both lanes to the
global value. Each copy is 28 x 28 points of 96 bits, about 75 kbit per copy, or
1.8 Mbit for two lanes: the largest on-chip memory of the design.

Jz, the out-of-plane current, has no edge formula in this scheme. It is spread on
the four corners with the bilinear weights of the movement's midpoint, corrected by
`+/- dx*dy/12` (the exact average of the bilinear weight over a straight path), and
scaled by `q*vz` times the movement's share of the step.

The field interpolation uses the staggered (Yee) positions:
- Ez at the node `(i, j)`;
- Ex and By at `(i+1/2, j)`;
- Ey and Bx at `(i, j+1/2)`;
- Bz at the cell centre.

`field_interp` chooses, per component, the 2x2 points of the 3x3 window that enclose
the particle and weights them linearly.

The Boris push (`boris_pusher`) is the standard relativistic one:
- half electric impulse;
- rotation through `t = tem*B/gamma` and `s = 2t/(1+t^2)`;
- second half impulse;
- then `dx = dt_dx * ux/gamma`.

`tem = q dt/(2m)` and `dt_dx = dt/dx` are computed by the host. `1/gamma` is computed
as `1/sqrt(1+|u|^2)` with an integer square root and a divide. Particles wrap
periodically at nx and ny.

## Particle sort unit

After the advance, almost all particles are still in their tile. The Courant limit
allows at most one cell of motion per step, so only particles near tile borders can
leave. The sort is a bucket sort that moves only the particles that are out of
place. It keeps two index buffers:
- `target_idx` holds array positions that must be refilled;
- `source_idx` holds the positions of particles that must move.

Each tile owns a section of both buffers, and that section is the tile's new range
of the particle array. This guarantees that the section is large enough. The unit
works in these steps:

1. **Count.** Stream all particles (one per cycle, reads buffered in a FIFO) and
   count the particles of each tile in on-chip counters (`MAX_TILES` = 400, a
   500 x 500 grid). Write the prefix sums as the new `tile_offset`.
2. **Register (steps 2-4 of the published algorithm).** Stream the particles again.
   Position `p` belongs to the tile `s` whose new range holds it.
   - A particle there that belongs to tile `s` costs one cycle.
   - Otherwise `p` is a hole of tile `s`:
     `target_idx[off[s] + ntgt[s]++] = p`, and the particle is one entering its
     tile `t`: `source_idx[off[t] + nsrc[t]++] = p`. This costs two index writes.

   This covers both particles that left their tile and particles displaced because
   a neighbouring range grew. At the end, every tile has `ntgt = nsrc`.
3. **Exchange.** For each tile and each registered pair, the particle at
   `source_idx` must go to `target_idx`. The set of source positions and the set of
   target positions are the same set, so copying directly could overwrite a
   particle before it is read. The exchange therefore runs in two passes:
   - pass A copies every source particle to a scratch array;
   - pass B copies the scratch entries to their targets.

Each pass is a stream, not a loop of blocking accesses. In pass A:
- source indices are read in order, one per cycle;
- each returned index immediately issues the read of that particle;
- each returned particle is written to the next scratch slot.

In pass B, the target indices and the scratch array are read as two parallel
streams, and their heads are paired into particle writes. FIFOs between the steps
absorb the memory latency. A pass ends when all its counters and FIFOs have drained.
Pass B starts only after every scratch write of pass A has completed. Counting,
registering and both exchange passes therefore all move one particle per cycle, the
initiation interval of the published design.

## Memory channels

Global memory, its controller, the host and the board's PCIe partition are outside
this RTL. The top brings out the channels of both units unchanged, prefixed `a_`
(advance) and `s_` (sort). All channels follow one protocol:
- **Read:** `req`/`addr` are held until `gnt`. The data comes back later on `rvalid`/`rdata`,
  in request order, after any latency.
- **Write:** `req`/`addr`/`data` (and a lane mask on the wide particle
  write) complete on `gnt`.

The units never run at the same time, so a memory system may merge their
particle and index channels (the end-to-end testbench does).

## Timing

Cycle counts are checked by the testbenches, for memories that always grant and
have a latency of 3 to 4 cycles:

| work | cycles |
|---|---|
| start of a step | 784 (clearing the current copies after reset) |
| load fields, per tile | 784 + round trip |
| advance, per tile | 6 per pair of particles + prefetch latency |
| store current, per tile | 784 + round trip |
| sort: count | np + 2 n_tiles + small |
| sort: register | np + 2 (out-of-order particles) + n_tiles |
| sort: exchange | 2 x (out-of-order particles + n_tiles + round trip) |

For the paper's 500 x 500 grid with 25 million particles, a step takes:
- advance: 400 x 1568 + 12.5 M x 6 ≈ 75.6 M cycles, or 0.32 s at 240 MHz;
- sort: about 50 M cycles to count and register, plus two cycles per out-of-order particle for the exchange.

## Differences from the published design

- Fixed point (Q7.24) instead of FP32 everywhere.
- The lane has a 6-cycle latency, not a deep pipeline. The throughput (II = 6) is
  the same.
- The field buffer reads a 3x3 window in one cycle, where the HLS design replicates
  and double-pumps the E/B RAMs.
- Jz deposit, the crossing order of the split, periodic boundaries, the ghost
  placement (1 before, 2 after) and the memory protocol are this design's choices.
  The published description does not fix them.
- The sort exchange goes through a scratch array in two passes.
- The CPU side (reduction, filter, field solver) and the OmpSs runtime are not part
  of the RTL.

## Files and simulation

`rtl/` holds one module or package per file. `pic_pkg` is the shared package, so
compile it first. `tb/` holds one self-checking testbench per module, plus:
- `tb_ref_pkg`: real-valued reference models of the interpolation, the push and
  the split;
- `tb_gmem`: a behavioural global memory with latency and random back-pressure.

Each testbench prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Wno-fatal -Mdir obj rtl/pic_pkg.sv tb/tb_ref_pkg.sv \
  rtl/*.sv tb/tb_gmem.sv tb/tb_zpic_fpga_top.sv --top-module tb_zpic_fpga_top
obj/Vtb_zpic_fpga_top
```

`tb_zpic_fpga_top` runs the top at its default parameters (2 lanes, 400 tile
counters). The grid and particle count are runtime inputs. It runs two complete time
steps on a 50 x 50 grid (2 x 2 tiles, 63 particles), the second with memories that
stall at random. After the advance, it checks every particle and every current
point against a real-valued model. After the sort, it checks order, offsets and the
particle set. It also checks that each mechanism occurred at least once:
- memory stalls;
- partial lane groups;
- an empty tile;
- one-, two- and three-movement splits;
- ghost deposits;
- periodic wraps;
- out-of-order particles and exchanges;
- adv_done before done.

`tb_workloads` runs the three plasma set-ups used to evaluate the design, reduced
to the same 50 x 50 grid with one particle per cell (2,500 particles per species):
- cold: particles at rest, nothing may move;
- warm: thermal momenta of width 1;
- Weibel: two species of opposite charge streaming along +z and -z, advanced one
  after the other into the same current array.

Each set-up runs three time steps at the top's default parameters, with zero fields
(the field solver belongs to the host). Every particle and every current point is
checked against the model, and the advance time against the stage rates. That is the
largest simulated case. The evaluated size, 500 x 500 cells with 25 to 50 million
particles for 500 steps, is beyond simulation. Nothing in the RTL limits it: the 400
tiles fit `MAX_TILES`, and the particle indices fit 32 bits. The arrays take about
1.4 GB (cold, warm) and 2.8 GB (Weibel) of the board's 8 GB memory, counting
24-byte particles, scratch and index buffers. A species is one run of the top with
its own `q`, `tem`, particle array and `tile_offset`.

The unit testbenches compare against the reference models to within fixed-point
rounding (1e-4 on particles, 1e-3 on summed current). They also check the rates:
- one point per cycle in load and store;
- II = 6 per lane;
- one particle per cycle in counting and registering.

`tb_vb_deposit` also checks charge conservation. The divergence of the deposited
current at every grid node equals the change of the area-weighted charge.
