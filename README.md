# A fully pipelined Wilson-Dirac stencil in double precision

Lattice QCD spends most of its time solving linear systems with the Wilson-Dirac
matrix, a sparse operator that couples every point of a four-dimensional grid to
its eight nearest neighbours. Applying it to one grid site `n` is a fixed
"stencil":

```
D psi(n) = (m_q + 4) psi(n)
         + 1/2 * sum_{mu=0..3} [ U_mu(n)          (1 - gamma_mu) psi(n + mu)
                               + U_mu^dagger(n-mu) (1 + gamma_mu) psi(n - mu) ]
```

`psi` is a spinor field (at every site, 4 spin x 3 colour complex numbers = 24
reals), `U_mu(n)` are 3x3 complex link matrices (18 reals), `gamma_mu` are
4x4 Dirac matrices and `m_q` is the quark mass. One stencil reads 9 spinors and 8
matrices (360 numbers) and does 1464 floating point operations.

This RTL evaluates that stencil in IEEE-754 double precision for **one site
per clock cycle**, in a single deep pipeline of 142 cycles with no stalls, and
feeds it from either of two places:

* **on-chip lattice**: a whole lattice of up to 12 x 8 x 8 x 8 sites is held in
  on-chip memory, split into as many banks as the stencil has operands, so that
  every operand of a site is read in the same cycle;
* **stream**: stencil inputs are prepared in external memory, one complete
  input set per site, and arrive as 256-byte beats; the memory bandwidth then
  sets how often the kernel can start.

It follows the architecture of a published FPGA study of this kernel (the
evaluation of the Dirac operator on a Xilinx U250 card, built there with
high-level synthesis). The stage structure, the latencies, the operation
counts, the memory organisation and the stream width below are that study's; the
number format details, the gamma-matrix convention, the address order, the
boundary conditions, the interfaces and the stream packing are this design's
own choices and are marked as such.

## The operator in hardware terms

### The half-spinor trick

`1 +/- gamma_mu` has rank 2. In the chiral representation used here,

```
gamma_mu = [ 0        A_mu ]      A_0 = 1 (time),  A_j = -i sigma_j (j = 1,2,3)
           [ A_mu^+   0    ]
```

so with `psi = (psi_up, psi_dn)` (two spin components each)

```
(1 +/- gamma) psi = [ h ; +/- A^+ h ],   h = psi_up +/- A psi_dn
```

Only the upper half `h` (2 colour vectors) has to be computed and multiplied by
the link matrix; the lower half of `U (1 +/- gamma) psi` is `+/- A^+ (U h)`.
Every row of `A` has one non-zero entry, one of `1, i, -1, -i`, so both the
projection and the rebuilding of the lower half need only additions and
subtractions plus free swaps of real and imaginary part and sign flips.

| direction `mu` | Dirac matrix | `A_mu` |
|---|---|---|
| 0 | gamma_4 (time) | `[[1,0],[0,1]]` |
| 1 | gamma_1 | `[[0,-i],[-i,0]]` |
| 2 | gamma_2 | `[[0,-1],[1,0]]` |
| 3 | gamma_3 | `[[-i,0],[0,i]]` |

These tables live in `dirac_pkg` (`a_col`, `a_phase`). The sign convention of
the formula above (a plus in front of the hopping sum, `1 - gamma` on the
forward neighbour) is the published one; the textbook Wilson operator has a
minus there, which amounts to flipping the sign of the hopping term (the host
can equally negate the links).

### The four pipeline stages (`dslash_kernel`)

| stage | work | operations | latency |
|---|---|---|---|
| 1 | copy the stencil input into local registers | 0 | 1 |
| 2 | `spin_project`: 8 projections, 16 colour-vector add/sub | 96 | 14 (one addition) |
| 3 | `su3_matvec` x 16: link matrix times each half-spinor row | 1152 | 70 (5 layers of 14) |
| 4 | `spin_accumulate`: rebuild lower halves, sum 9 terms, halve | 216 | 57 (4 additions + 1 copy) |
|   | **total** | **1464** | **142** |

Each adder and multiplier is a 14-cycle pipelined unit, and each "layer"
below is one unit deep, so all parallel paths stay aligned; operands that skip
a layer pass through `delay_line` shift registers of the same length.

**Stage 3** is where most of the hardware is: 16 matrix-vector products,
each 36 real multipliers and 30 real adders. Every output component is
formed as

```
layer 1   ur*vr, ui*vi, ur*vi, ui*vr            (products, j = 0,1,2)
layer 2   p_j = (ur vr - ui vi) + i (ur vi + ui vr)
layer 3   acc = 0 + p_0                          (exact: a 14-cycle delay)
layer 4   acc = acc + p_1
layer 5   acc = acc + p_2
```

This sequential accumulation is what makes the stage five layers deep and gives
the 1152-operation count (8 operations per complex multiply-accumulate, the
start from zero included); a balanced tree would be one layer shorter.

**Stage 4** sums, for each of the 24 real outputs, the 8 hop contributions
and the mass term in the fixed order

```
(((t0 + t1) + (t2 + t3)) + ((t4 + t5) + (t6 + t7))) + t8
```

with `t0..t3` the forward hops, `t4..t7` the backward hops and
`t8 = 2 (m_q + 4) psi(n)`. The final copy stage halves the sum (an exponent
decrement, exact), which produces the factor 1/2 of the hopping term without a
multiplier. The 24 mass multiplications run during stages 2-3 and wait in a
delay line. Because of these fixed orders the result is reproducible bit for
bit, and the testbenches compare with a software model that uses the same
order.

Throughput: a new site every cycle, i.e. 1464 operations per cycle (439
GFLOP/s at 300 MHz).

### Numbers

`dirac_pkg` fixes the format: `EXP_W = 11`, `MAN_W = 52` (binary64).
`fp_add` and `fp_mul` round to nearest even. This design's own
simplifications: subnormal inputs are treated as zero and results that would be
subnormal are flushed to zero; overflow gives infinity; any NaN input, `inf -
inf` or `inf * 0` gives the quiet NaN. Exact cancellation gives +0. For normal
data away from the range limits the units match IEEE-754 exactly. Each unit
computes its result in one combinational block followed by a 14-deep register
chain (`ADD_LAT`, `MUL_LAT`); an FPGA or ASIC flow is expected to retime those
registers into the logic. Setting `EXP_W/MAN_W` to 8/23 gives single precision
(the testbenches' reference model assumes binary64).

## Data types

All structures are packed, lowest index in the least significant bits:

| type | contents | bits |
|---|---|---|
| `fp_t` | one number | 64 |
| `cplx_t` | `{re, im}` | 128 |
| `colvec_t` | 3 complex, colour index | 384 |
| `halfspinor_t` | 2 colour vectors | 768 |
| `spinor_t` | 4 colour vectors, spin index | 1536 |
| `su3_t` | 3 rows of 3 complex, row-major | 1152 |
| `stencil_in_t` | `psi_c` (centre), `psi_hop[8]`, `u[8]` | 23040 |

Hop `k = 0..3` is the forward neighbour `n + mu` (`mu = k`) with link
`U_mu(n)`; hop `k = 4..7` is the backward neighbour `n - mu` (`mu = k - 4`)
with the already conjugate-transposed link `U_mu^dagger(n - mu)`. The kernel
never conjugates a matrix.

## Feeding the kernel

### On-chip lattice (`lattice_store`, `site_sweep`)

A block RAM delivers one word per port per cycle, while a stencil needs 17
different words. The store therefore keeps one bank per operand:

* 8 link banks. Bank `mu` holds `U_mu(n)` at address `n`; bank `4 + mu` holds
  `U_mu^dagger(n - mu)`, also at address `n`. The links are thus stored twice,
  once plain and once conjugated and shifted, and all eight banks are read at
  the same address. The host writes both copies.
* 9 spinor banks, each a full copy of the field. Bank 0 is read at `n`, bank
  `1 + k` at neighbour `k`'s address. A host write goes to all nine copies.

A bank word is a whole spinor or matrix. The memory for the default
12 x 8 x 8 x 8 lattice is 6144 x 23040 bits = 141.6 Mbit, of which the
duplication costs the larger part; it is the price of reading a full stencil
every cycle. How the words are then split over physical RAM blocks is left to
the implementation tools.

`site_sweep` walks the sites in the order
`n = x0 + L0*(x1 + L1*(x2 + L2*x3))` (direction 0, of extent `L0 = 12`,
fastest) and computes the eight neighbour addresses by adding or subtracting the
direction's stride, with a correction at the edge. Boundaries are **periodic**,
which is this design's choice; a multi-device version would replace the wrap
with halo data.

Timing of a sweep (mode 0): `start` at edge `t`; the site `n` is issued at
`t + 1 + n`; the store answers one cycle later; the kernel adds 142 cycles.
Result `n` is visible at `t + 144 + n` and `done` pulses with the last one.

### Stream (`stream_gather`)

The host lays out the `stencil_in_t` records of consecutive sites back to back,
without padding, and the memory system delivers 2048-bit beats with a
valid/ready handshake. `stream_gather` appends each beat above the bits it
already holds (buffer of one record plus one beat) and releases the lowest
23040 bits as soon as they are complete. A record therefore leaves two cycles
after the beat holding its last bit, and on average one record starts every
23040 / 2048 = 11.25 cycles: the stream, not the kernel, sets the initiation
interval.

The source study shrinks each link to 10 numbers (from 18) before streaming,
which brings a record to 296 numbers and the interval to about 9 cycles in
double precision (5 in single). That parametrisation, and the logic that
rebuilds the 3x3 matrix from it, are not specified in the study, so they are
not built; records here carry full matrices.

## Top level (`dirac_top`)

```
            host writes                                  start/busy/done
                 |                                              |
                 v                                              v
         +---------------+   17 operands   +-------+      +-----------+
         | lattice_store |<----addresses---| site_ |<-----| sweep     |
         | 8 link banks  |                 | sweep |      | bookkeep. |
         | 9 psi copies  |---stencil_in--+ +-------+      +-----------+
         +---------------+               |
                                     mode=0 \
  s_valid/s_data  +---------------+          >--> dslash_kernel --> res_valid
  ---256 B/beat-->| stream_gather |--mode=1 /     (II 1, 142 cyc)    res_tag
                  +---------------+                                  res_data
```

| port | dir | meaning |
|---|---|---|
| `mode` | in | 0: on-chip lattice, 1: stream. Change only while `busy` is low (asserted). |
| `mass` | in | `m_q + 4` as a binary64 number, constant during a sweep |
| `psi_we, psi_waddr, psi_wdata` | in | write one site's spinor (to all copies) |
| `u_we, u_wbank, u_waddr, u_wdata` | in | write one link word into bank `u_wbank` |
| `start, busy, done` | in/out/out | start a sweep; busy until the last result; done pulse |
| `s_valid, s_data, s_ready` | in/in/out | beat stream; `s_ready` is low in mode 0 |
| `res_valid, res_tag, res_data` | out | one result per cycle, no back-pressure; the tag is the site index (mode 0) or the record number since reset (mode 1) |

Parameters: `L0..L3` (default 12, 8, 8, 8) and `BEAT_W` (2048). Resets are
synchronous and active low and clear only control state; memory contents and
data pipelines are not reset.

## Verification

Each module has a self-checking testbench in `tb/`, ending with a line
`TB_RESULT checks=N failures=M`. The reference model (`tb/dirac_ref_pkg.sv`)
uses the simulator's `real` arithmetic with the Dirac matrices written out in
full, and offers two references: one in the hardware's order of operations,
compared bit for bit, and the plain textbook formula (full 4x4 projectors,
matrix applied to all four spin components), compared within 1e-12 relative,
which checks the half-spinor algebra independently.

| testbench | what it checks |
|---|---|
| `tb_fp_add`, `tb_fp_mul` | 2000 random and 10 directed operand pairs each, bit-exact, latency 14 |
| `tb_spin_project` | 300 sets, against `(1 -/+ gamma) psi` from the full matrices, latency 14 |
| `tb_su3_matvec` | 500 products, bit-exact, latency 70 |
| `tb_spin_accumulate` | 200 sets, lower halves from the full gamma blocks, latency 57 |
| `tb_dslash_kernel` | 40 stencils, back to back and with gaps, both references, latency 142 |
| `tb_lattice_store` | random reads of every bank after writes and rewrites |
| `tb_site_sweep` | neighbour indices from coordinates, edge flags, two sweeps |
| `tb_stream_gather` | 24 records, exact release cycle, gaps, disable |
| `tb_dirac_top` | 4x3x2x2 lattice: sweep, stream, sweep again with another mass |
| `tb_dirac_top_full` | the same at the default 12x8x8x8 lattice, 3 x 6144 results |

The end-to-end tests also count that every mechanism occurred: results at
lattice edges (periodic wrap), stream bubbles, the stream held off in mode 0,
both mode switches and the `done` pulses.

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/dirac_pkg.sv tb/dirac_ref_pkg.sv tb/tb_dslash_kernel.sv \
    --top-module tb_dslash_kernel -j 8
./obj_dir/Vtb_dslash_kernel
```

(the remaining modules are found through `-I`). The kernel has about 600
multipliers and 770 adders of 64 bits, so a build takes one to two minutes;
the full-size end-to-end test then simulates in about half a minute.

## Where this departs from, or stops short of, the source study

* **Reduced links in the stream.** Not built (see above); streamed records use
  full matrices, interval 11.25 instead of about 9 cycles. The study also
  quotes 9 for double precision where its own word count (296 x 8 B / 256 B)
  gives 9.25.
* **Precision.** Only the double-precision kernel is built. The study's solver
  mixes a high- and a low-precision kernel and also evaluates 32-bit float and
  32-bit fixed point; float needs only the two constants in `dirac_pkg` changed,
  fixed point is not provided.
* **Relaxed initiation interval.** The study shows that when the stream allows
  only one stencil every few cycles, the kernel can share units and shrink. This
  RTL always builds the full one-site-per-cycle kernel.
* **Gamma matrices.** The study refers to a textbook for its conventions and
  calls the projectors real-valued; with Hermitian Euclidean Dirac matrices they
  cannot all be real. The chiral representation of that textbook is used, with
  direction 0 as time.
* **Memory organisation.** The study reports its on-chip memory use in URAM
  blocks for its own partitioning; the bank structure here (8 link banks, 9
  spinor copies) is one way to get the one-cycle stencil read it requires, not
  a reproduction of those figures.
* **Not part of the RTL:** the conjugate-gradient solver, which runs on the
  host and calls the operator; the external DDR memory and its controllers
  (four channels, 256 bytes per cycle at 300 MHz); the inverse link
  parametrisation. Their connections appear as top-level ports.
* **Exceptions.** Subnormals flush to zero and there are no exception flags.
