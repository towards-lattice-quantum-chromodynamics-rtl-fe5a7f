# A fully pipelined Wilson-Dirac stencil engine in double precision

Lattice QCD spends most of its time solving linear systems `D psi = eta`, where
`D` is the Wilson-Dirac operator on a four-dimensional periodic lattice. An
iterative solver such as conjugate gradient (CG) touches `D` only through
products `D * vector`. This RTL is the hardware half of such a solver: it holds
the gauge links and one spinor field in on-chip memory and applies

```
out(n) = psi(n) + kappa * sum_{mu=0..3} [ U_mu(n)         (1 - gamma_mu) psi(n+mu)
                                        + U_mu(n-mu)^dag  (1 + gamma_mu) psi(n-mu) ]
```

to every lattice site `n`. It uses IEEE double precision throughout and
starts one site per clock. The rest of CG (scalar products, vector updates,
the stopping test) stays on a host processor, which calls the engine once per
operator application.

The main idea is to spend area, not time. Every floating-point operation of
one stencil has its own pipelined unit, about 1440 double-precision adders and
multipliers in all. The memories are duplicated until all 9 spinors and 8
link matrices of a stencil can be read in one clock. A site then enters the
pipeline every clock (initiation interval 1), and its result comes out 142
clocks later.

## 1. What one stencil needs

At site `n` the operator reads:

* the spinor `psi` at `n` and at its 8 neighbours `n +- mu`. A spinor has
  4 spin x 3 colour complex components, which is 24 doubles.
* 8 SU(3) link matrices: `U_mu(n)` for the forward hops and `U_mu(n-mu)` for
  the backward hops. A link has 9 complex entries, stored row-major.

The spin matrices `(1 -+ gamma_mu)` have a special form, and the engine relies
on it. In the chiral basis used here every `gamma_mu` is `[[0,B],[C,0]]` in
2x2 spin blocks. Each row of `B` and `C` has exactly one non-zero entry, and
that entry is one of `+1, -1, +i, -i`. So for `s = +-1`:

```
(1 + s*gamma_mu) psi  =  [ h ; s*C*h ],     h = psi_upper + s*B*psi_lower
```

Only the upper half `h` (2 colour vectors) has to be multiplied by the link.
The lower half is recovered afterwards by multiplying with `s*C`. Because the
entries are `+-1` and `+-i`, that recovery is only sign flips and real/imaginary
swaps, which cost wiring and no arithmetic. `lqcd_pkg` lists the column and
phase of the non-zero entry in each row of `B` and `C` for each `mu`:

| mu | B row 0 | B row 1 | C row 0 (spin 2) | C row 1 (spin 3) |
|----|---------|---------|------------------|------------------|
| 0 (x) | `+i psi3` | `+i psi2` | `-i h1` | `-i h0` |
| 1 (y) | `-psi3`   | `+psi2`   | `+h1`   | `-h0`   |
| 2 (z) | `+i psi2` | `-i psi3` | `-i h0` | `+i h1` |
| 3 (t) | `+psi2`   | `+psi3`   | `+h0`   | `+h1`   |

`gamma_5 = diag(1,1,-1,-1)`. The hermitian conjugate is `D^dag = gamma_5 D gamma_5`,
so the engine can also compute it by negating the lower spin components of
its inputs and of its output (see `dagger` below).

## 2. The stencil pipeline (`dslash_kernel`)

Every double-precision add or multiply takes 14 clocks (`FP_LAT`). The kernel
chains four stages:

| Stage | Module | Work | Double ops | Clocks |
|---|---|---|---|---|
| 1 | registers in `dslash_kernel` | capture the 9 spinors, 8 links, kappa, tag | 0 | 1 |
| 2 | `spin_project` | 16 projections `h = psi_up + s*B*psi_lo`, 2 colour vectors per direction and sign | 96 adds | 14 |
| 3 | 8 x `su3_mat_vec` | `chi = kappa * U * h` (4 forward units) and `kappa * U^dag * h` (4 backward units), each unit handling both vectors of a half spinor | 672 mul + 480 add | 70 |
| 4 | `spin_reconstruct_sum` | rebuild the lower halves and add the 9 spinors | 192 adds | 57 |
| | | **total** | **1440** | **142** |

Stage 3 is a five-deep cascade:

1. the four real products of each complex product (mul);
2. `re = ar*br - ai*bi`, `im = ar*bi + ai*br` (add);
3. and 4. the sum of the three complex terms of each row as `(p0 + p1) + p2`,
   with `p2` delayed one adder time (add, add);
5. the kappa scaling (mul).

That gives 28 + 28 + 14 = 70 clocks. `U^dag` is only a transposed index and a
negated imaginary part of the link, so it costs nothing.

Stage 4 adds the 9 spinors in a tree: 9 → 5 → 3 → 2 → 1. At each level the
odd spinor waits in a delay line. Four adder levels plus one output register
give 4·14 + 1 = 57 clocks.

Delay lines (`pipe_delay`) keep everything aligned:

* the links wait 14 clocks for Stage 2;
* the site's own spinor waits 84 clocks for Stages 2 and 3;
* kappa moves with the data;
* an 11-bit tag (the site's output address) and the dagger flag run along
  the whole 141 clocks after Stage 1.

Only the valid bits are reset. An assertion checks that every `in_valid` is
followed by `out_valid` exactly 142 clocks later.

Stall-free throughput gives a call time of `V + 142` clocks for `V` sites.
That is the `V*delta + tau` with `delta = 1`, `tau = 142` from which the
published design derives its 676 GFLOP/s at 500 MHz for `V = 1728`.

## 3. Feeding one site per clock: memory organisation

A single RAM has one read port. The stencil needs 9 spinor reads and 8 link
reads per clock, so the design duplicates data:

* **Links (`gauge_mem`, one per direction and block).** There are two copies.
  Copy 0 is read at `n`, for the forward link `U_mu(n)`. Copy 1 is read at
  `n - mu`, for the backward link `U_mu(n-mu)`. Real and imaginary parts are
  separate arrays, and each word holds all 9 entries of one matrix. The
  colour dimension is folded into the word width.
* **Input spinors (`spinor_mem`, NRD = 9, one per block).** There are nine
  copies, written together, one per read port: the centre site, 4 forward
  neighbours and 4 backward neighbours.
* **Result spinors (`spinor_mem`, NRD = 1).** One copy, written by site index
  as results leave the kernel.

**Sublattice blocks.** The `L^3 x T` lattice is split along `t` into
`NB = 2` blocks of `T/2` time slices. Each block has its own link and spinor
memories. These hold the block's slices plus one halo slice on each side,
which are copies of the neighbouring block's boundary. A block's stencils
therefore never leave its memories, so each block's data stays local on the
chip. The cost is two extra slices per block. The block-local address of
`(x,y,z,tl)` is

```
addr = ((tl*L + z)*L + y)*L + x,   tl = 0 (halo), 1..T/NB (own slices), T/NB+1 (halo)
```

and global time slice `t` lands in block `b` at `tl = (t - b*T/NB + 1) mod T`,
if that is at most `T/NB + 1`. During loading, every site word is written into
every block that holds it (its own block and the halo of the neighbouring
block) in the same clock.

`site_sequencer` walks block 0 and then block 1, with `x` fastest. It
computes the eight neighbour addresses from coordinate counters: `x`, `y` and
`z` wrap periodically, and in `t` the halo slices take the place of the wrap.
The walk order is also the global lexicographic order, so the output tag is
simply a running count.

At the defaults (`L = 6`, `T = 8`, `NB = 2`) each block is 6^3 x 6 = 1296
sites deep. The on-chip storage is about:

* links: 2 blocks x 4 directions x 2 copies x 1296 x 1152 bits = 24 Mbit;
* input spinors: 2 x 9 x 1296 x 1536 bits = 36 Mbit;
* result store: 1728 x 1536 bits = 2.7 Mbit.

## 4. A call (`mult_batch`)

`start` samples `kappa`, `dagger` and `load_gauge`, and a call then runs three
phases:

1. **Load.** The host streams its arrays on ten channels, each carrying one
   double per beat with a valid/ready handshake:
   * real and imaginary parts of `psi_in`;
   * real and imaginary parts of `U_x`, `U_y`, `U_z` and `U_t`.

   Each channel carries one array in site order, with the 9 (link) or 12
   (spinor, index `3*spin + colour`) doubles of a site back to back. A
   `seq_loader` per channel packs each site into one word. If `load_gauge` is
   0, the link channels stay idle and the links from the previous call are
   reused, so a CG run loads its links only once.
2. **Compute.** The sequencer issues `V` sites on consecutive clocks. The
   memories answer one clock later, and the kernel delivers results 142
   clocks after that. `kernel_cycles` counts the clocks from the first site
   entering the kernel to the last result leaving it. It equals `V + 142`.
3. **Store.** `result_streamer` sends `psi_out` back on two channels (real
   and imaginary) under one valid/ready pair, 12 beats per site. The host may
   throttle at will.

`done` pulses at the end of the call, and `busy` is high from `start` to
`done`. A `start` while busy is ignored, and an assertion flags it.

With `dagger = 1` the call computes `D^dag psi` instead. A CG iteration on
`D D^dag` therefore takes two calls, one with `dagger = 1` and one with
`dagger = 0`, and the intermediate vector goes through the host.

## 5. Double-precision units

`fp64_add` and `fp64_mul` are ordinary IEEE-754 binary64 units that round to
nearest-even. They compute in their first register stage and carry the result
through 13 more, so a retiming synthesis flow can spread the logic over the
whole 14-clock latency. On an FPGA the 53x53 product maps onto DSP slices.

The units simplify two things:

* subnormal inputs are read as zero, and subnormal results flush to signed
  zero;
* any NaN result is the canonical quiet NaN.

Lattice fields stay far from the subnormal range. Otherwise the results agree
bit for bit with a CPU, and the unit testbenches check exactly that.

## 6. Parameters and sizes

| Parameter | Default | Meaning |
|---|---|---|
| `L` (mult_batch, site_sequencer, seq_loader) | 6 | spatial extent |
| `T` | 8 | time extent (must be divisible by `NB`, and `T > 2`) |
| `NB` | 2 | sublattice blocks along `t` |
| `FP_LAT` / `LAT` | 14 | latency of one double add or multiply |

The lattice size is fixed when the design is elaborated, because it sets the
memory depths. The default 6^3 x 8 lattice (1728 sites) is the size that the
published design ran on its smallest board and compiled for its large one.
Larger published sizes (8^3 x 8, 8^3 x 10, 8^3 x 12) need `L = 8` and the
matching `T`. They do not fit the default build: an 8^3 x 12 lattice needs
blocks 4096 sites deep instead of 1296. The arithmetic does not change with
the lattice size; only the memories grow.

The arithmetic core is large, with roughly 1440 double units and 1.5 Mbit of
pipeline registers in the kernel alone. A generic (non-FPGA) synthesis of the
whole top needs a lot of memory.

## 7. Where this RTL departs from the published design

* **Operation count.** This RTL uses 1440 double operations per site. The
  published count is 1464, with 216 of them in the final stage; here that
  stage has 192. The published description does not show what the other 24
  operations are. The stage latencies (1/14/70/57, 142 in total) match.
* **Sign of the hopping term.** The sum is added with `+kappa`, exactly as
  the operator above is written. Many codes use `-kappa`. Negating kappa at
  the host gives that convention.
* **Neighbour addresses** are computed from coordinate counters instead of
  being read from precomputed neighbour tables.
* **Spinor duplication** into nine full copies is this design's way of
  reaching nine reads per clock. The published design only says that data
  duplication was used.
* **`D^dag` mode** (the `gamma_5` sandwich) and the **`load_gauge`** input
  are how this RTL serves the solver's `D D^dag` products and the reuse of
  links across calls. The published design runs `D^dag D` as part of the
  accelerated function without giving the mechanism. Here each call applies
  `D` or `D^dag` once.
* **Host transport.** DMA engines, the tool-generated data movers, DDR and
  the host CPU are outside this RTL. The ten input and two output channels
  with valid/ready handshakes stand in for the accelerator's side of them.
* **Not built:** the slower kernel variants with initiation intervals of 2,
  4, 16 and 120 (the published comparisons for smaller devices), a second
  kernel instance working on the other block in parallel, compressed
  two-row link storage (tried and rejected in the published work), and the
  multi-FPGA network that is proposed there only as future work.
* **FPGA mapping** (URAM versus BRAM placement, DSP usage, the 500 MHz clock)
  is left to the implementation tools. The RTL writes plain arrays and
  arithmetic.

## 8. Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. All stencil checks
compare against `lqcd_ref_pkg`, a reference written with the simulator's
`real` type and full 4x4 Dirac matrices. It uses no half-spinor tables, so it
does not share the RTL's shortcuts. Its relative tolerance is 1e-12.

| Testbench | Checks |
|---|---|
| `tb_fp64_add`, `tb_fp64_mul` | 4000 random operand pairs each (cancellation, zeros, infinities): bit-exact against the simulator's double arithmetic, at exactly 14 clocks |
| `tb_spin_project` | the 16 projections against full `(1 -+ gamma)` products, at 14 clocks |
| `tb_su3_mat_vec` | `kappa*U*h` and `kappa*U^dag*h`, at 70 clocks |
| `tb_spin_reconstruct_sum` | reconstruction and 9-term sum against fully projected spinors, at 57 clocks |
| `tb_dslash_kernel` | 40 random stencils, some in dagger mode, with an input gap; value, tag and latency 142 |
| `tb_gauge_mem`, `tb_spinor_mem` | random writes and reads on all ports against a shadow array |
| `tb_site_sequencer` | every address decoded back to coordinates on a 3^3 x 4 lattice: periodic wrap, halo slices, order, block starts |
| `tb_seq_loader`, `tb_result_streamer` | packing and order of the channels with random gaps and back-pressure |
| `tb_mult_batch` | whole engine on 2^3 x 4 (32 sites, two blocks): a call with link load and `D`, then a call with kept links and `D^dag`. Random input gaps and output stalls. All 768 returned doubles per call checked; `kernel_cycles = V + 142`; each mechanism (input gap, output stall, block switch, link reuse, dagger) must occur |
| `tb_mult_batch_full` | the same at the default 6^3 x 8 size (1728 sites, 41,472 doubles per call), no parameters overridden; about 25 s of simulation |

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -j 8 -y rtl -y tb \
    rtl/lqcd_pkg.sv tb/lqcd_ref_pkg.sv tb/tb_mult_batch.sv --top tb_mult_batch
./obj_dir/Vtb_mult_batch
```

Testbenches that contain the kernel take about two minutes to compile,
because of the roughly 1440 floating-point units. The others compile in
seconds. The testbench files contain no Verilator-specific code.
