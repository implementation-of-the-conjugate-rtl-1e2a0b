# A fully pipelined Wilson-Dirac stencil accelerator in double precision

Lattice QCD spends most of its time solving `D chi = eta` for the
Wilson-Dirac operator `D` on a four-dimensional lattice. The usual solver is
conjugate gradient (CG) on the hermitian operator `D D^dagger`. The solver
loop is cheap: scalar products and vector updates that a host processor can
run. The cost is in applying `D`. That is a stencil: every lattice site
reads its eight neighbours and eight 3x3 complex link matrices, and does 1464
double-precision operations.

This RTL is the part that runs in programmable logic. It is a stencil
pipeline that takes one new lattice site every clock (initiation interval 1)
and delivers its result 142 clocks later. Around it are on-chip field
memories that supply all the operands of a stencil in one clock, and a
sequencer that walks the lattice. A host loads the fields and starts a run.
It then reads back `D psi`, `D^dagger psi`, or `D^dagger psi` together with
`D D^dagger psi`.

The arithmetic is IEEE-754 binary64 throughout. Every addition and every
multiplication is a separate pipelined unit with a latency of 14 clocks.
Nothing is shared or time-multiplexed, so the pipeline holds 1464 floating-point units.

## The operator

For a spinor field `psi` (per site: 4 spin x 3 colour complex numbers,
1536 bits) and links `U_mu(n)` (3x3 complex, 1152 bits), the accelerator
computes

    (D psi)(n) = (m_q + 4) psi(n)
               + 1/2 sum_{mu=0..3} [ U_mu(n) (1 - gamma_mu) psi(n + mu)
                                   + U_mu(n - mu)^dagger (1 + gamma_mu) psi(n - mu) ]

with periodic boundaries. Note the `+` in front of the hopping sum. It is
kept as specified, although many codes write a `-` there. If you need the
other sign, negate the links. `D^dagger` is formed as `gamma_5 D gamma_5`:
the same pipeline runs with `gamma_5` applied to every input spinor and to
the result.

The gamma matrices are in the chiral representation:
`gamma_j = [[0, -i sigma_j], [i sigma_j, 0]]` for x, y, z,
`gamma_t = [[0, 1], [1, 0]]`, and `gamma_5 = diag(1, 1, -1, -1)`. Every
`gamma_mu` is block off-diagonal with a single entry of `+-1` or `+-i` per
row. Multiplying by `gamma_mu`, by `gamma_5` or by `i` is therefore only a
permutation of wires with sign-bit flips and re/im swaps. No arithmetic unit
is spent on it. `rtl/cg_pkg.sv` holds these wiring tables (`a_col`, `a_pow`,
`b_col`, `b_pow`).

## The half-spinor trick

`(1 -/+ gamma_mu) psi` has rank two. Its lower two spin components are a
fixed `+-1`/`+-i` multiple of the upper two. The pipeline therefore:

1. projects each neighbour spinor to a *half spinor* (two colour vectors),
2. multiplies only those two vectors by the link,
3. rebuilds the lower two components from the products by wiring.

This halves the number of link multiplications, from 32 to 16 per site.

## Pipeline stages and where the 142 clocks and 1464 operations come from

| stage | block | work | clocks | operations |
|---|---|---|---|---|
| 1 | `spinor_bram`, `gauge_bram` | read 9 spinors and 8 links in one clock | 1 | 0 |
| 2 | `spin_project` | 8 legs x 2 components: one su3_vector add/sub each | 14 | 96 |
| 3 | `gauge_mult` | 16 link x vector products (`su3_matvec`) | 70 | 1152 |
| 4 | `spin_reconstruct` | rebuild, 8-term sum, mass term, output register | 57 | 216 |
| | | total | 142 | 1464 |

**Stage 3, `su3_matvec`.** Each product is a five-layer cascade of 14-clock
layers (70 clocks). Layer 1 forms all 36 real products. Layer 2 combines
them into the 9 complex products. Layers 3 to 5 accumulate each row
serially, starting from zero: `acc = 0 + p0`, then `+ p1`, then `+ p2`.
Delay lines hold `p1` for one layer and `p2` for two. That makes
36 multiplications and 36 additions, 72 operations per product, and
16 x 72 = 1152. The addition of zero is real hardware. It reproduces a
C-style accumulation loop whose floating-point additions may not be
reordered, and it is what makes five layers. Because the reference model
in the testbenches sums in the same order, stage 3 is verified bit for bit.

**Stage 4, `spin_reconstruct`.** The 57 clocks are four addition layers and
one register: 4 x 14 + 1 = 57.
- A three-layer adder tree sums the eight rebuilt contributions: 7 x 24 additions.
- The mass term `(m_q + 4) psi(n)` is 24 multiplications. They run in
  parallel with the tree and are delayed to meet it.
- One layer adds the mass term: 24 additions.
- The output register applies `gamma_5` when needed.

That is 168 + 24 + 24 = 216 operations. The factor 1/2 is not an
operation: the exponent of the tree's sum is decremented, which is exact.

**Alignment.** The links leave stage 1 together with the spinors but are
used only in stage 3, so `dslash_kernel` delays them by 14 clocks. The
site's own spinor is needed only in stage 4; it is delayed by 84 clocks and
then multiplied. The whole kernel has no stall and no back-pressure. A
valid bit and a tag (the write address) travel alongside the data through
a 141-clock shift register.

## Memory organisation

A block RAM port yields one word per clock, but a stencil needs 17 words.
The fields are therefore replicated rather than banked by address:

- **Spinor fields** (`spinor_bram`, `NRD = 9`): the field is stored nine
  times. Every write goes to all copies. Copy `k` serves neighbour `k`, and
  copy 8 serves the site itself.
- **Gauge field** (`gauge_bram`): eight banks, all read at the site
  address `n`.
  - Bank `mu` holds `U_mu(n)`.
  - Bank `4 + mu` holds `U_mu(n - mu)` (the link, not its adjoint).
  - The backward banks are a shifted duplicate of the forward ones, and the
    host writes them. The adjoint is taken by wiring in `su3_matvec`.

The accelerator holds three spinor fields: *source* (9 copies),
*intermediate* (9 copies) and *result* (1 copy). With the default
`VOL = 6144` (an 8x8x8x12 lattice) the storage is:

| storage | bits |
|---|---|
| spinor fields, 19 copies | 179 Mbit |
| links, 8 banks | 57 Mbit |

That is far more than block RAM alone offers. On a real device these arrays
would map onto UltraRAM plus block RAM. They are written as plain arrays,
so a synthesis tool infers the memories.

## Sequencing a run

`site_sequencer` holds coordinate counters, with x running fastest, and
issues one site per clock: `n = x + lx (y + ly (z + lz t))`. It computes
the eight neighbour addresses from precomputed strides, applying
`-(L-1)*stride` or `+(L-1)*stride` at the periodic boundary. The extents
`lx, ly, lz, lt` are run-time inputs, so any lattice up to `VOL` sites runs
on one build, and extents of 1 and 2 are handled.

| op | passes |
|---|---|
| `OP_D` | source -> result, `g5 = 0` |
| `OP_DDAG` | source -> result, `g5 = 1` |
| `OP_DDDAG` | source -> intermediate with `g5 = 1` (`D^dagger`), then intermediate -> result with `g5 = 0` (`D`) |

After the last site of a pass, the sequencer waits 142 clocks until every
result of that pass is written, and only then starts the next pass. A pass
over `V` sites takes `V + 142` clocks. A run takes `passes * (V + 142) + 1`
clocks, which the `cycles` output reports. This is the performance law
`V * interval + latency`. With 1464 operations per site at 500 MHz and
V = 1728 (6^3 x 8), it gives 676 GFLOP/s of kernel throughput.

The accelerator offers both `D^dagger` alone and `D D^dagger` (via the
intermediate field) because CG on `D D^dagger` needs both per iteration:
`alpha = |r|^2 / |D^dagger p|^2` and `r -= alpha D D^dagger p`. The
final solution is `chi = D^dagger psi`.

## Top-level interface (`dslash_accel`)

| port | meaning |
|---|---|
| `start`, `op`, `lx..lt`, `mass` | start a run. `mass` is `m_q + 4` as a double. `op` and the extents are sampled at `start`; `mass` must stay stable during the run |
| `busy`, `done`, `cycles`, `passes` | status. `done` pulses once, after the last result is written |
| `hw_en`, `hw_sel`, `hw_addr`, `hw_spinor`, `hw_link` | write port, one word per clock, only while idle. `hw_sel = 0`: source spinor field; `1..8`: gauge bank `hw_sel - 1` |
| `hr_sel`, `hr_addr`, `hr_data` | read port. `hr_sel = 0`: result field, `1`: intermediate field (only while idle). `hr_data` holds the word addressed in the previous clock |

The host ports stand in for the DMA/data-mover path between external DRAM
and the on-chip memories. That path, the DRAM and the host processor are
not part of this RTL. An assertion flags host writes during a run.

## Floating-point units

`fp_add` and `fp_mul` are complete binary64 units:
- round to nearest, ties to even,
- IEEE infinities and NaN,
- exact cancellation gives `+0`,
- subnormal inputs read as zero; results that would underflow into the
  subnormal range are flushed to zero. This is the one departure from full
  IEEE behaviour, and it is irrelevant for lattice data.

Each unit computes in its first register stage and then delays the result
through 13 more stages, to give the 14-clock latency the pipeline schedule
is built on. A production design would spread the work over those stages
(or use vendor floating-point cores) to close timing at a few hundred MHz.
The schedule would not change.

## What is from the specification and what is this design's own

These follow the published design:
- double precision,
- 14-clock add/multiply,
- the four stages with 1 / 14 / 70 / 57 clocks and 0 / 96 / 1152 / 216
  operations,
- 142-clock latency, interval 1, 1464 operations per site,
- eight separately stored, duplicated link arrays,
- the half-spinor rescaling,
- `D^dagger = gamma_5 D gamma_5`,
- CG on `D D^dagger`,
- lattice sizes up to 8^3 x 12.

These are this design's own choices, made where the specification is silent:
- the chiral gamma basis,
- how the stage-3 and stage-4 operation counts split into layers
  (inferred from the printed counts),
- where the 1/2 is applied,
- flush-to-zero for subnormals,
- replicating the *spinor* fields too,
- storing backward links pre-shifted,
- the sequencer, its pass/drain control, the start/busy/done handshake and
  the host port,
- the run-time lattice extents,
- the `cycles` counter.

One point is ambiguous in the specification: it names both `D^dagger D` and
`D D^dagger` as the operator applied. The CG listing uses `D D^dagger`, and
so does this design.

Not built:
- the variants with initiation interval 2, 4 or 120, which share operators
  to save resources,
- several kernel instances working on halves of the lattice.

## Files

`rtl/` (one module or package per file):

| file | role |
|---|---|
| `cg_pkg.sv` | types (`su3_vector_t`, `su3_matrix_t`, `su3_spinor_t`, `half_spinor_t`, `op_e`), gamma wiring, sign/phase helpers |
| `fp_add.sv`, `fp_mul.sv` | binary64 units |
| `pipe_delay.sv` | delay line |
| `su3_matvec.sv` | 70-clock link x vector |
| `spinor_add.sv` | 24 parallel adders |
| `spin_project.sv`, `gauge_mult.sv`, `spin_reconstruct.sv` | stages 2, 3 and 4 |
| `dslash_kernel.sv` | stages 2 to 4 with the alignment delays |
| `spinor_bram.sv`, `gauge_bram.sv` | field memories |
| `site_sequencer.sv` | lattice walk and pass control |
| `dslash_accel.sv` | top |

`tb/`:

| file | role |
|---|---|
| `dirac_ref_pkg.sv` | reference model in `real` arithmetic. It builds full 4x4 gamma matrices from the Pauli matrices, forms gamma_5 as a product, and applies full projectors without the half-spinor trick or any wiring tables |
| `<block>_tb.sv` | per-block checks, including the exact latency of every stage |
| `dslash_accel_tb.sv` | end-to-end on 2x3x2x4 and 4x4x1x2 lattices, memory depth 64 |
| `dslash_accel_full_tb.sv` | default build, 8x8x8x12 lattice, every site checked |
| `cg_solve_tb.sv` | a complete CG solve with the testbench as host |
| `accel_tb_body.svh` | shared by the two accelerator testbenches |

## Simulating

With Verilator 5, for any testbench `T`:

    verilator --binary --timing --assert -j 4 --top-module T \
        -y rtl -y tb +libext+.sv -Irtl -Itb rtl/cg_pkg.sv tb/T.sv
    ./obj_dir/VT +verilator+rand+reset+2

Each testbench prints `TB_RESULT checks=N failures=M`. Building a testbench
that contains the kernel takes one to three minutes, because the pipeline
holds 1464 floating-point units. Simulation runs at about 2,500 clocks per
second.

| testbench | sim time | result |
|---|---|---|
| `dslash_accel_full_tb` | ~1 min | 24,590 checks; `D D^dagger` on 6144 sites in 12,573 clocks |
| `cg_solve_tb` | ~20 s | 97 CG iterations to `|r|^2/|eta|^2 < 1e-22`, then `|D chi - eta| / |eta| = 8e-12` |

`cg_solve_tb` uses `m_q = 1` and links of 1 plus 0.2 noise. Near
`m_q = 0` the operator becomes nearly singular on such a small lattice, and
CG needs far more iterations.

Results are compared with the reference with a relative tolerance of
1e-12 (1e-11 for `D D^dagger`), because the hardware adder tree sums in a
different order. The stage-2 and stage-3 tests are bit-exact.

## Changing it

- **Lattice size.** `VOL` (and `AW = $clog2(VOL)`) of `dslash_accel` sets
  the memory depth. The extents are run-time inputs.
- **Operator latency.** `cg_pkg::FP_LAT` sets the latency of every
  operator. All delay lines and the 141-clock valid pipeline are derived
  from it. The sequencer's drain (`DRAIN`, 142 in `dslash_accel`) must be
  changed to match.
- **Gamma basis.** A different basis means changing the wiring tables in
  `cg_pkg`. Any basis in which each `gamma_mu` row has a single `+-1`/`+-i`
  entry keeps the arithmetic unchanged. The reference model in
  `dirac_ref_pkg` has its own gamma definitions and must be changed to
  match.
- **Synthesis.** The full kernel is large: a generic coarse synthesis of
  the complete top needs more memory than a 16 GB machine offers. The
  blocks below the kernel synthesise on their own.
