# A streaming Rys-quadrature ERI kernel with on-chip compression

Quantum-chemistry codes spend much of their time on electron repulsion
integrals (ERIs), `[ab|cd]`: four-centre integrals over Cartesian Gaussian
basis functions. They come in *quartet classes*, each fixed by the angular
momenta of its four shells. A `[pp|pp]` quartet, for example, yields
3·3·3·3 = 81 integrals, and an `[ff|ff]` quartet yields 10,000. There are
far more integrals than memory to hold them, so they are often recomputed or
stored compressed.

This RTL computes one quartet class at a time as a deep, overlapping
pipeline in single-precision floating point. It then compresses each quartet
to signed `n`-bit integers before the result leaves the chip:

    x ≈ q · ε,   ε = b_max / (2^(n-1) − 1),   q = round-half-away(x / ε)

Here `b_max` is the largest magnitude in the quartet, so every code fits in
`n` bits and the absolute error per integral is at most ε/2.

The datapath is written for one class that is fixed when it is built.
Parameters `LA, LB, LC, LD` select the class, `NBITS` the code width and
`CMAX` the number of quartets that may be in flight. The defaults are
`[pp|pp]`, 16-bit codes and `CMAX = 8`. Every buffer shape and loop bound
follows from these numbers at elaboration time.

The structure follows the FPGA kernel published by Wu, Kenter, Schade,
Kühne and Plessl ("Computing and Compressing Electron Repulsion Integrals
on FPGAs"). Where this RTL fills a gap or departs from that design, the
section *Departures* says so.

## The arithmetic: Rys quadrature in three steps

For a quartet with centres `R_A..R_D` and exponents `α, β, γ, δ`, the Rys
scheme writes each integral as a short quadrature. It uses `nRys` roots
`t_μ` with weights `w_μ`:

    [ab|cd] = Σ_μ  w_μ · I_x(a_x,b_x,c_x,d_x; μ) · I_y(...; μ) · I_z(...; μ)

Here `nRys = floor((La+Lb+Lc+Ld)/2) + 1`, which is 3 for `[pp|pp]` and 7
for `[ff|ff]`. The one-dimensional factors `I` come from recurrences in
which each Cartesian axis ξ and each root μ is independent:

* **Setup.** With `A = α+β`, `B = γ+δ`, `P` and `Q` the Gaussian product
  centres, and `ρ = t²/(A+B)`, setup builds
  * `B00 = ρ/2`
  * `B10 = 1/(2A) − B·ρ/(2A)`
  * `B01 = 1/(2B) − A·ρ/(2B)`
  * `C00 = (P−R_A) − B(P−Q)ρ`
  * `C00' = (Q−R_C) + A(P−Q)ρ`

  It also forms the centre differences `AB = R_A − R_B` and `CD = R_C − R_D`.
* **Vertical recurrences** build `I(i,0,k,0)` from `I(0,0,0,0) = 1`:
  * `I(i+1,0,k,0) = C00·I(i,0,k,0) + i·B10·I(i−1,0,k,0) + k·B00·I(i,0,k−1,0)`
  * the mirror relation in `k` uses `C00'` and `B01`.
* **Horizontal recurrences** move angular momentum from `a` to `b` and from
  `c` to `d`:
  * `I(i,j+1,k,l) = I(i+1,j,k,l) + AB·I(i,j,k,l)`
  * and the same in `l` with `CD`.

The host supplies the roots and weights, as in the published design. The
roots arrive as `t²`. Each weight has the Gaussian prefactor and the basis
function normalisation already folded in. The base value `I(0,0,0,0)` is
therefore 1, and all of the scaling sits in `w_μ`.

## Four stages and their trip counts

```
 2 x 512-bit words ┌───────┐  B, C, AB, CD  ┌─────────────┐  I(i,j,k,l,μ,ξ)  ┌────────────┐
 ─────────────────▶│ setup │───────────────▶│ recurrence  │─────────────────▶│ quadrature │
   (G, R)          └───────┘   registers    │   loops     │   I buffer,      │   loops    │
                                            └─────────────┘   CMAX copies    └─────┬──────┘
                                                                   [ab|cd], b_max  │
 512-bit chunks    ┌────────────────┐   [ab|cd] buffer, CMAX copies                │
 ◀─────────────────│ compress-store │◀─────────────────────────────────────────────┘
 + 32-bit ε        └────────────────┘
```

Each stage is a loop nest. The loops over "small" indices are unrolled into
parallel hardware. The remaining loops run one iteration per clock, and
their iteration counts set the throughput.

| stage | unrolled (parallel) | sequential | cycles per quartet |
|---|---|---|---|
| setup (`eri_setup`) | everything: 3 axes × nRys roots | – | 2 input beats |
| recurrences (`eri_rr_loops`) | all `i, j, k` of one `(ξ, μ, l)` | ξ, μ, l | n_RR = 3·nRys·(Ld+1) |
| quadrature (`eri_quadrature`) | ξ, μ and all `a, b` | c, d | n_GQ = ng(Lc)·ng(Ld) |
| compress-store (`eri_compress_store`) | one 512-bit chunk | chunks | n_CS = ⌈n_ERIQ / ⌊512/NBITS⌋⌉ |

`ng(L) = (L+1)(L+2)/2` is the number of Cartesian functions in a shell.
`n_ERIQ` is the product of the four `ng` values.

The **recurrence stage** evaluates the complete `I(i,j,k,l)` set for one
axis and one root as a single combinational network, then writes the
`l`-slice selected by its counter. The three counters are nested as ξ
(outer), μ, then `l` (inner).

The **I buffer** (`eri_i_buffer`) is laid out so that the writer and the
reader each get all the parallel ports they need:

* the writer stores a whole `(i, j, k)` slice per cycle;
* the reader fetches, for every axis at once, the `(i, j)` plane of all
  roots at the `(k, l)` that one output row needs.

The **quadrature stage** visits the output rows `(c, d)` with `d` outer and
`c` inner. In each cycle it forms the `ng(La)·ng(Lb)` integrals of one row:
for each lane, ξ-products are taken for every root, weighted, and summed
over the roots. It keeps a running maximum of `|x|` across the rows. After
the last row it writes `ε = b_max · (1/(2^(NBITS−1) − 1))` next to the
quartet's rows in the `[ab|cd]` buffer (`eri_abcd_buffer`).

Steady-state throughput is one quartet every `max(2, n_RR, n_GQ, n_CS)`
cycles. For the default `[pp|pp]` that is max(2, 18, 9, 3) = 18 cycles,
limited by the recurrences. Some other classes:

| class | n_RR | n_GQ | n_CS (16-bit) |
|---|---|---|---|
| [ss\|ss] | 3 | 1 | 1 |
| [pp\|pp] | 18 | 9 | 3 |
| [dd\|ps] | 9 | 3 | 4 |
| [fd\|ps] | 12 | 3 | 6 |
| [dd\|dd] | 45 | 36 | 41 |
| [ff\|ff] | 84 | 100 | 313 |

For large classes the 512-bit store is the bottleneck. For small ones the
recurrences are.

## Overlapping quartets: private copies

A quartet spends only `n_RR` cycles in the recurrence stage, but its
results are read by the quadrature stage much later. For the stages to work
on different quartets at once, each buffer between them holds `CMAX`
*private copies* (slots), one per quartet in flight. The published design
obtains these copies from the compiler's `max_concurrency` setting on the
outer quartet loop. Here they are explicit.

`eri_slot_ctrl` manages the slots of one buffer as a ring with a write
pointer, a read pointer and an occupancy count:

* **Producer side.** The producer may start a quartet while
  `used < CMAX`. It always writes into slot `wp`, and a `commit` at its
  last cycle advances `wp`.
* **Consumer side.** The consumer may start while `used > 0`. It reads
  slot `rp`, and a `release` after its last access advances `rp`.
* **Ordering.** Because quartets enter and leave every stage in order, a
  ring suffices and no tags are needed.
* **Assertions** check that commit never meets a full ring and release
  never an empty one.

Stalls travel backwards through the pipeline:

1. Store back-pressure (`st_ready` low) freezes compress-store.
2. The `[ab|cd]` ring then fills and freezes the quadrature stage
   (`gq_stall`).
3. Next the I ring fills and freezes the recurrences (`rr_stall`).
4. The setup stage then holds its result, and finally `in_ready` drops.

No stage ever drops or repeats work. The kernel exposes the two
occupancies and the stall flags as status outputs.

## Packing codes into 512-bit chunks

This is the least obvious part of the design. The quadrature stage produces
integrals in rows of `NGAB = ng(La)·ng(Lb)` values. The memory interface,
however, takes chunks of `EPC = ⌊512/NBITS⌋` codes (32 at 16 bits, 42 at
12 bits). Row and chunk boundaries do not line up, and a quartet must still
take exactly `n_CS` chunk cycles. Each chunk cycle of `eri_compress_store`
therefore does the following:

1. **Load.** If the remainder register `Y` holds fewer than `EPC` codes and
   rows are left, load `RPC = min(⌈EPC/NGAB⌉, rows)` rows from the `[ab|cd]`
   buffer. Compress them in parallel, multiplying by `ε⁻¹` (one fp32
   division per quartet) and rounding half away from zero, into `X`.
2. **Emit.** Form `Z = Y ++ X` and write its first `EPC` codes as the chunk:
   code `e` sits at bits `e·NBITS +: NBITS`, and unused lanes and top bits
   are zero.
3. **Carry.** Whatever is left in `Z` becomes the new `Y`.

The last chunk of a quartet may be partial. It carries `st_last`, releases
the buffer slot and presents `ε` on the 32-bit output in the same cycle.

Worked example, `[pp|pp]` at 16 bits (NGAB 9, 9 rows, EPC 32, RPC 4):

| chunk | Y before | rows loaded | codes in Z | written | Y after |
|---|---|---|---|---|---|
| 0 | 0 | 4 (36) | 36 | 32 | 4 |
| 1 | 4 | 4 (36) | 40 | 32 | 8 |
| 2 | 8 | 1 (9) | 17 | 17 + 15 zero lanes | 0 |

When a row is wider than a chunk (for example `[dd|ps]`, 36 codes per row
at 16 bits), some cycles write only from `Y` and load nothing.

A few edge cases:

* A code that rounds past `±(2^(NBITS−1) − 1)` through fp32 rounding
  saturates.
* A quartet whose integrals are all zero has `ε = 0` and is written as zero
  codes.

**Order of integrals in the output.** Chunk `st_addr` holds codes
`32·st_addr … 32·st_addr + 31` of the run, counted across quartets. Every
quartet starts a new chunk, so quartet `q` occupies chunks `q·n_CS …
(q+1)·n_CS − 1`. Its `ε` is written at `eps_addr = q`. Within a quartet the
integrals run as follows:

    index = ((d · ng(Lc) + c) · ng(Lb) + b) · ng(La) + a

Cartesian functions within a shell are ordered `x, y, z` for p and `xx, xy,
xz, yy, yz, zz` for d. In general the x exponent falls first, then the y
exponent. To decompress, compute `x ≈ code · ε`.

## Interfaces and number formats

`eri_kernel` has three streams:

* **Load stream.** `in_valid / in_ready / in_data[511:0]` carries two
  words per quartet, word G then word R. Field `f` is
  `in_data[32f +: 32]`, an IEEE single.
  * word G: `R_A.x, R_A.y, R_A.z, R_B.xyz, R_C.xyz, R_D.xyz, α, β, γ, δ`
    (fields 0–15).
  * word R: `t²_0 … t²_7` in fields 0–7 and `w_0 … w_7` in fields 8–15.
    Only the first `nRys` of each are used.
* **Store stream.** `st_valid / st_ready / st_data[511:0] / st_addr /
  st_last` carries one chunk per accepted cycle.
* **ε store.** `eps_valid / eps_data / eps_addr` is valid with the last
  chunk of a quartet and uses the same `st_ready`.

`rst_n` is an active-low asynchronous reset of all control state. Buffer
contents are not reset, and nothing is read before it is written.
`in_ready` does not depend on `in_valid`, and back-to-back quartets are
accepted without bubbles.

All arithmetic is IEEE-754 single precision, from the functions in
`fp32_pkg`:

* round to nearest even;
* subnormal inputs and results flushed to zero;
* no NaN or infinity handling beyond overflow to infinity.

Each stage evaluates its unrolled arithmetic in one combinational cycle.
The design is therefore functionally exact to the algorithm, but it has
not been pipelined for clock frequency. An FPGA or ASIC flow would need
registers inserted inside the recurrence and quadrature networks.

## Departures from the published kernel

* **Further unrolling is not built.** The published kernel chooses, per
  class, to also unroll `l`, `μ` or `ξ` in the recurrences, and `c` or `d`
  in the quadrature. That brings e.g. `[pp|pp]` from 18 to 3 cycles per
  quartet. Only the default pattern (`ijk` and `ξμab`) is implemented here,
  so small classes run at their default trip counts.
* **Setup formulas.** The B/C expressions are the standard Rys ones. The
  paper defers to the original literature for them. This RTL uses three
  divisions (`1/A`, `1/B`, `1/(A+B)`).
* **Weights.** The weights are applied in the quadrature, with
  `I(0,0,0,0) = 1`, instead of folding anything into the recurrences.
* **Input field layout.** The paper gives only the size of the two words;
  the field assignment is this design's.
* **Chunk packing.** The details of the packing (an `RPC`-row load width,
  every quartet starting a fresh chunk, zero padding, saturation) are this
  design's, chosen so that exactly `n_CS` chunks leave per quartet.
* **Private copies.** These are explicit ring-managed slots rather than a
  compiler feature. `CMAX = 8` is the published starting value. The
  published optimum differs by class and reaches 128.
* **Memory and host are outside.** Global memory, the PCIe link and the
  host code (including the Rys root and weight computation) are not part
  of the RTL. The roughly 10-cycle per-quartet overhead that the published
  performance model attributes to global memory therefore does not appear
  here.
* **Default class.** The paper synthesises one kernel per class, for all
  256 classes, and has no single default. `[pp|pp]` is this RTL's choice of
  default.

## Files

| file | contents |
|---|---|
| `rtl/fp32_pkg.sv` | single-precision add, multiply, divide, compare, integer conversion |
| `rtl/eri_pkg.sv` | class-derived constants: `ng`, `nrys`, Cartesian order, word layout |
| `rtl/eri_setup.sv` | setup stage, two-beat input, registered B, C, w, AB, CD |
| `rtl/eri_rr_loops.sv` | recurrence loops, one `(ξ, μ, l)` slice per cycle |
| `rtl/eri_i_buffer.sv` | I buffer with CMAX copies and weights |
| `rtl/eri_quadrature.sv` | quadrature loops, `b_max` reduction and ε |
| `rtl/eri_abcd_buffer.sv` | `[ab|cd]` buffer with CMAX copies and ε per copy |
| `rtl/eri_compress_store.sv` | quantisation and 512-bit chunk packing |
| `rtl/eri_slot_ctrl.sv` | ring controller for the private copies |
| `rtl/eri_kernel.sv` | top level, wiring of all of the above |
| `tb/eri_ref_pkg.sv` | double-precision reference model used by the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per block, plus the two below |
| `tb/tb_eri_kernel.sv` | end to end, default parameters |
| `tb/tb_eri_workloads.sv`, `tb/eri_class_run.sv` | end to end for other classes and 12-bit codes |

## Simulating

The testbenches are self-checking. Each ends with a line
`TB_RESULT checks=N failures=M`, and each has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/fp32_pkg.sv rtl/eri_pkg.sv tb/eri_ref_pkg.sv rtl/eri_*.sv \
    tb/tb_eri_kernel.sv --top-module tb_eri_kernel
./obj_dir/Vtb_eri_kernel
```

To run another testbench, substitute its file and top module. For
`tb_eri_workloads`, also add `tb/eri_class_run.sv`.

`tb_eri_kernel` runs the top at its default parameters. It streams 48
random quartets in three phases:

1. a free-running phase, which checks the exact 18-cycle interval between
   quartets;
2. long stretches of store back-pressure;
3. random input gaps and random back-pressure.

Every code is decompressed and compared with a double-precision evaluation
of the same integrals. The error must stay within ε/2 plus a small fp32
allowance. The testbench counts each of the following and fails if any
never happens:

* store back-pressure;
* recurrence and quadrature stalls;
* input stalls;
* several quartets in flight;
* a chunk started from a carried remainder;
* an all-zero quartet.

`tb_eri_workloads` builds four more kernels and checks results and
steady-state rates the same way: `[ss|ss]`, `[dd|ps]`, `[fd|ps]`, and
`[pp|pp]` with 12-bit codes. The block testbenches drive each stage alone,
with random stalls on both sides.

To build another class, set `LA, LB, LC, LD` (and optionally `NBITS`,
`CMAX`) on `eri_kernel`. Everything else adapts. The combinational networks
grow quickly with angular momentum, so large classes take long to
elaborate and simulate. The largest class simulated so far is `[fd|ps]`.
