# A streaming Smooth Particle Mesh Ewald pipeline in SystemVerilog

Molecular dynamics codes split the electrostatic force into a short-range part,
summed directly over nearby pairs, and a long-range part that is solved on a
grid in Fourier space. This RTL implements that long-range part, Smooth
Particle Mesh Ewald (SPME), as one deep streaming pipeline. A timestep goes
through it as follows:

1. **Charge spreading.** Each atom's charge is spread onto the 4x4x4 grid
   points around it, using cubic (order-4) B-spline weights.
2. **Forward 3D FFT.** The charge grid is transformed as three passes of 1D
   FFTs (X, then Y, then Z). Corner turns between the passes reorder the data.
3. **Green's function multiply.** Every Fourier coefficient is multiplied by a
   precomputed real coefficient. The coefficients are streamed from external
   memory in exactly the order the grid arrives.
4. **Inverse 3D FFT.** Three more passes, in the order Z⁻¹, Y⁻¹, X⁻¹.
5. **Force interpolation.** The same B-splines and their derivatives take the
   gradient of the resulting potential at each atom. This gives one force
   vector per atom.

Every unit handles one atom per clock, or one 8-sample vector per clock. The
grid never leaves the chip, except for the Green coefficients.

The default size is a 64³ grid. Every size-dependent piece of control is
derived at elaboration time from `LOGN` (log₂ of the grid edge), so the same
RTL builds for 16³, 32³ or 128³.

```
atoms ─► atom_reorder ─► charge_spread ─► FFT X ─► T ─► FFT Y ─► A2A ─► T ─► FFT Z ─► green_mult ─► T
                                                                                        ▲ (HBM port)  │
forces ◄─ force_interp ◄─ T ◄─ IFFT X ◄─ T ◄─ IFFT Y ◄─ T ◄─ A2A ◄─ IFFT Z ◄───────────────────────────┘
```

`T` is a transpose unit and `A2A` is an all-to-all switch.

## Files

| file | content |
|---|---|
| `rtl/pme_pkg.sv` | number formats, types, stream-order functions |
| `rtl/bspline4.sv` | cubic B-spline weights and derivatives |
| `rtl/atom_reorder.sv` | hazard-avoiding atom reorder buffer |
| `rtl/charge_spread.sv` | 64-bank charge grid, spreading and unload |
| `rtl/fft_unit.sv` | 8-wide feedforward radix-2 FFT |
| `rtl/transpose_unit.sv` | bit-dimension permutation (corner turn) |
| `rtl/green_mult.sv` | Green's function multiply, sequential coefficient reads |
| `rtl/force_interp.sv` | 64-bank potential grid, force interpolation |
| `rtl/a2a_switch.sv` | crossbar with crosspoint FIFOs and a static schedule |
| `rtl/pme_lr_top.sv` | the whole long-range pipeline of one board |
| `tb/tb_*.sv` | one self-checking testbench per unit, plus two end-to-end ones |

## Streams and stream orders

This is the idea that holds the pipeline together, and the hardest part to
follow in the RTL.

**Vectors.** Every unit passes one vector of 8 complex samples per clock.

**Position bits.** A volume of N³ samples is a stream of N³/8 vectors. The
sample at stream position `p = vector_index*8 + lane` has 3·LOGN position bits.

**Order maps.** Which grid point sits at position `p` is described by an order
map `ORD`: position bit `i` carries coordinate bit `ORD[i]`. The coordinate
bits are numbered as follows:

| coordinate | bits |
|---|---|
| x | 0..L-1 |
| y | L..2L-1 |
| z | 2L..3L-1 |

The natural order is the identity map, with x fastest.

**Rules for the units:**

- **An FFT unit** transforms blocks of N consecutive positions, so the axis it
  transforms must occupy position bits 0..L-1, in order. Its output is not in
  frequency order. It is a fixed bit permutation of frequency order, described
  below, and `ord_after_fft` computes the map of its output.
- **A transpose unit** applies any bit permutation of the position bits. It
  turns one order map into the next, so that the next FFT finds its axis in
  bits 0..L-1.

**`lr_order(L, k)`.** This function in `pme_pkg` gives the order map at each
of the 13 points of the pipeline (k = 0..12). Each transpose unit's
permutation is `ord_perm(lr_order(L,k), lr_order(L,k+1))`. Its frame size
(how many of the lowest position bits it permutes) is the highest bit the
permutation moves.

**Consequences:**

- The Green coefficients must be stored in the order `lr_order(L, 5)`, the
  order in which the forward Z pass delivers them.
- With that, memory reads are strictly sequential.

At 64³ the frame sizes are 2¹², 2¹⁸, 2⁶, 2¹², 2¹⁸ and 2⁶ samples:

- The two corner turns that bring z to the front, and take it away again, need
  a whole volume.
- Those after the Z pass only undo the FFT's output permutation.

## The FFT unit

`fft_unit` is an 8-wide radix-2 decimation-in-frequency FFT in the
feedforward style:

- There are log₂N butterfly stages with no feedback.
- It takes one vector per clock, so a 1D transform takes as many clocks as it
  takes to read its data.

**Stages.** Stage `s` combines samples whose index differs in bit
`b = LOGN-1-s`.

- If that bit is currently one of the three lane bits, the butterflies pair
  lanes directly.
- If it is a time bit (vector index), a delay commutator first exchanges it
  with lane bit 0:
  - Odd lanes are delayed by 2^k vectors.
  - The lanes are swapped when time bit `k` is set.
  - Even lanes are delayed to match.

**Bit tracking.** The unit keeps track, at elaboration time, of where each
index bit sits after every exchange (`fft_hold`). This tracking also gives
each butterfly its twiddle exponent, and the position of each frequency bit in
the output. Twiddles are tables computed from `$cos`/`$sin` during
elaboration.

**Latency.** 17 clocks at N = 64: 6 butterfly registers plus commutator delays
of 4 + 2 + 1 + 4.

**Arithmetic.** Fixed point with no scaling between stages. Grid samples are
40 bits, so a full 64³ transform of realistic charges does not overflow.

**Inverse transform.** `INVERSE=1` conjugates the input and the output.

## Corner turns: `transpose_unit`

The unit stores a frame of 2^FB samples in eight memory banks. Writes use
one address shared by all banks, and each row is written with its lanes
rotated by a fold of the row number. That rotation guarantees that any 8
samples needed together on the read side are in 8 different banks. Each bank
then gets its own read address, and a lane-select network after the banks
puts the samples in place.

Frames are double-buffered: one frame is read while the next is written.
The unit therefore adds one frame of latency and no bubbles. Assertions check
for bank conflicts and frame overrun.

## Charge spreading and its hazard

**Bank layout.** `charge_spread` holds the grid in 64 banks. Point (x, y, z)
is in bank (x mod 4, y mod 4, z mod 4). An atom's 4x4x4 cell therefore touches
every bank exactly once, and all 64 read-modify-write updates happen in the
same clock.

**Pipeline:**

1. B-spline weights.
2. xy products.
3. xyz products; the bank read is issued.
4. Times the charge.
5. Add and write back.

**The hazard.** The read-modify-write spans 2 clocks (`CS_HAZ_WIN`). A second
atom whose cell overlaps the first one's within that window would read a
stale value.

**`atom_reorder`** prevents this:

- It keeps up to 8 atoms waiting.
- Each clock it issues the oldest one whose cell is not within 4 grid points
  (periodically, in all three axes) of the cells issued in the last 2 clocks.
- If no waiting atom qualifies, it issues a bubble.
- It reports both events (`ev_reorder`, `ev_bubble`).
- An assertion in `charge_spread` checks that no hazard reaches the grid.

**Unload.** The grid streams out in natural order at one vector per clock.
Lanes l and l+4 fall into the same bank, so each bank has a second read port.
A clear pass of N³/64 clocks zeroes the grid before the atoms come in.

## Green's function multiply

`green_mult` counts vectors and uses the count as the read address, so the
coefficient memory sees a purely sequential stream. Each sample is multiplied
by its coefficient and shifted right by an amount that covers two things:

- the coefficient's fraction bits;
- the 1/N³ normalisation of the transform pair, minus 12 guard bits (`PXF`).

**Why the guard bits.** Without them, the normalisation would leave only a few
significant bits before the inverse transform at 32³ and above. The inverse
path therefore carries 12 extra fraction bits, and force interpolation removes
them at its output.

## Force interpolation

`force_interp` uses the same 64-bank layout.

**Loading.** It loads the potential grid as it arrives from the last transpose
unit. Each bank has two write ports, one for lanes l and one for l+4.

**Force.** For each atom it reads the 4x4x4 cell in one clock. It forms
weight products with one derivative factor per axis (for example dx·wy·wz for
Fx). It multiplies by the potential and sums 64 terms per axis in an adder
tree. The result is

```
F = -q · Σ (derivative weights) · φ
```

in grid units. It produces one force per clock, 6 clocks after the atom.

## All-to-all switch

`a2a_switch` is a crossbar with a FIFO at every crosspoint and a fixed
rotating schedule: in slot s, output o takes from input (o + s) mod NI. No
headers are needed; each input word carries only its destination board.

**Virtual cables.** With virtual cables on, the destination board is turned
into a port as (dest − own board) mod NO, where port 0 is the on-chip
loopback. This way every board can run the same bitstream. The cabling this
implies is that cable k of board b reaches board (b + k) mod NO.

**Use in the top.** The top module is the single-board configuration, so it
instantiates the switch as a 1x1 loopback at the two corner-turn points. The
unit itself is built and tested for 2 inputs and 4 ports, the size of a
four-board, two-pipeline system.

## Number formats (`pme_pkg`)

All arithmetic is fixed point:

| quantity | width | fraction bits | notes |
|---|---|---|---|
| grid samples | 40 | 16 | inverse path: 28 |
| atom coordinates | 24 | 16 | unsigned, grid units, 8 integer bits |
| charge | 16 | 12 | |
| B-spline weights | 18 | 16 | |
| twiddles | 18 | 16 | |
| Green coefficients | 18 | 16 | |
| forces | 48 | 16 | |

## Using the top module

`pme_lr_top` has these parameters:

- `LOGN`, default 6 (a 64³ grid).
- `G_LAT`, the read latency of the coefficient memory.

A timestep runs in this order:

1. Pulse `cs_clear` and wait until `cs_busy` falls (N³/64 clocks).
2. Send the atoms on `atom_in_*`, using the valid/ready handshake.
3. Wait for `atom_in_idle`.
4. Pulse `cs_unload`. The grid runs through the whole FFT chain on its own.
   The pipeline reads the Green coefficients on `hbm_rd_*`: one 8-coefficient
   word per clock, sequential addresses, data expected `G_LAT` clocks later,
   stored in order `lr_order(LOGN, 5)`.
5. When `grid_ready` pulses, send the atoms again on `fi_atom_*`. Each force
   comes back on `force_*` 6 clocks later.

At 64³ the grid part takes about 99,500 clocks, dominated by the two
whole-volume corner turns.

## Verification

Each testbench checks its unit against values it computes itself, and prints
`TB_RESULT checks=… failures=…`.

| testbench | what it checks |
|---|---|
| `tb_bspline4` | weights and derivatives against the polynomials |
| `tb_fft_unit` | forward and inverse 64-point transforms against a direct DFT, including input gaps; latency of 17 clocks |
| `tb_transpose_unit` | an 8x8 corner turn and a rotation of 8 bits, sample by sample |
| `tb_atom_reorder` | every atom is issued once; no two overlapping cells within the window; one atom per clock for non-overlapping atoms |
| `tb_charge_spread` | grid against a real-valued spread; clear and unload timing |
| `tb_green_mult` | exact products; sequential, wrapping addresses; latency |
| `tb_force_interp` | forces against a real-valued interpolation; one per clock; 6-clock latency |
| `tb_a2a_switch` | routing under virtual cables; per-crosspoint order; ≥95% input acceptance under all-to-all traffic; back-pressure |
| `tb_pme_lr_top` | full pipeline at 32³ against a floating-point SPME reference with direct DFTs |
| `tb_pme_lr_full` | 65,536 atoms on the default 64³ grid with no parameter overrides; also checks the spreading rate (65,536 atoms took 65,556 clocks) |

**The end-to-end tests:**

- Use a smooth synthetic Green's function.
- Count atom reorders, hazard bubbles, coefficient reads, switch words,
  corner-turn frames, grid hand-over and forces, and fail if any never
  happened.
- Reached a largest force error of about 2·10⁻⁵ in grid units against forces
  up to 0.016.

To run one testbench:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/pme_pkg.sv tb/tb_pme_lr_top.sv --top-module tb_pme_lr_top
./obj_dir/Vtb_pme_lr_top
```

## Where this design departs from the published one

- **Arithmetic.** The original works in single-precision floating point
  (written in OpenCL). This RTL is fixed point throughout, with the formats
  above.
- **Configuration.** Only the one-board, one-pipeline configuration is
  assembled. Not built:
  - the split of the volume into slabs across boards or pipelines;
  - the link interface to the serial transceivers;
  - multi-pipeline charge spreading.
  The switch exists as a unit, but the top only uses it as a loopback.
- **No overlap of phases.** Stages of a timestep do not overlap: spreading,
  grid pipeline and force pass run one after another. A timestep at 64³ with
  65,536 atoms takes about 235,000 clocks (about 780 µs at 300 MHz). The
  published single-board figure is about 350 µs.
- **FFT latency.** Here it is 17 clocks at N = 64; the published unit reports
  about 11.
- **Transpose latency.** Here it is a whole frame, which is large for the
  whole-volume corner turns.
- **Two extra transpose units.** One follows the Z pass and one follows the
  X⁻¹ pass. They restore the order the next unit expects, because this FFT
  emits a bit-permuted frequency order.
- **Own choices, not from the published design:**
  - the atom reorder mechanism (a small buffer with oldest-first issue);
  - the bank addressing of both grids;
  - the clear pass;
  - the switch's port mapping;
  - all widths.
- **Separate units.** Charge spreading and force interpolation are separate
  units here, as in the published design (which plans to share them).
