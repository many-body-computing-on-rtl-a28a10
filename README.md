# Two many-body solvers in fixed-point hardware

This RTL implements two classic many-body algorithms as streaming, fully pipelined
FPGA-style datapaths. Both are controlled from a host through simple register-style ports.

- **Metropolis Monte Carlo of the 2D classical XY model.** Spins are planar angles θ on
  an L × L periodic square lattice. The energy is E = −Σ⟨ij⟩ cos(θi − θj).
- **iTEBD for the spin-1/2 antiferromagnetic Heisenberg chain.** iTEBD is infinite
  time-evolving block decimation, an imaginary-time evolution of a two-site matrix product
  state with bond dimension Db. The core of each step is a 2Db × 2Db SVD, computed with a
  two-sided Jacobi method whose rotations can run in parallel.

The defaults are L = 128 and Db = 30. The logic targets a 100 MHz (10 ns) clock.

The top module `manybody_top` holds both engines side by side. They share only clock and
reset.

## 1. XY Monte Carlo engine (`xy_mc_engine`)

### Update order

The square lattice is bipartite. None of the four neighbours of a site on the "A"
checkerboard lies on "A", so every A site can be updated independently while the B sites are
held. The engine uses this as follows:

1. It streams the L²/2 sites of sublattice A through the update pipeline, one per clock.
2. It waits for the pipeline to drain, so that every A write is done.
3. It then streams sublattice B the same way.

One Monte Carlo step (one trial for every site) takes exactly **L² + 20 cycles**, which is
164 µs at L = 128.

### Per-site pipeline (9 cycles)

| stage | block | what happens |
|---|---|---|
| 1 | `xy_spin_mem` | read θ, the site's RNG state X, and the four neighbour angles (synchronous read) |
| 2–5 | `xy_trial_gen` | two LCG draws X1 = lcg(X) and X2 = lcg(X1). θ' = X1[47:16]; p = X2[47:16]; X2 is written back as the new seed |
| 6–7 | `xy_delta_e` | s_old = Σ cos(θ − θn) and s_new = Σ cos(θ' − θn), using eight CORDIC evaluations; ΔE = s_old − s_new |
| 8–9 | `xy_accept` | P = exp(−βΔE) (`exp_neg`); accept if p < P, or always when ΔE ≤ 0; write back θ or θ' |

The number representations are:

- **Angles** are 32-bit binary angles: 2³² corresponds to 2π, so angle arithmetic wraps
  for free.
- **Random numbers:**
  - Every site owns a 48-bit linear congruential generator, X' = (aX + c) mod 2⁴⁸, with
    a = 25214903917 and c = 11. Each site therefore follows its own independent random
    stream.
  - `lcg48` is a 2-cycle pipeline, which gives 20 ns per random number at 10 ns.
- **Energies** use 29 fraction bits.
- **β** is an 8.24 input. T = 0.85 gives β = 19737901.
- **The exponential** is computed in three steps:
  1. y·log2(e) is split into an integer part and a 10-bit fraction.
  2. 2^(−fraction) is read from a 1025-entry table, with linear interpolation. The table
     holds 2^(−k/1024) and is computed by a Taylor series while the design is elaborated.
  3. The integer part becomes a right shift.

  The relative error is below 1e−5.

### Memory and hazards

`xy_spin_mem` is one write port plus five read ports of the same arrays. On an FPGA this
maps to replicated block RAM.

Within a sublattice no site reads a site being written, so there is no forwarding. The only
hazard is between sublattices, and draining the pipeline covers it. An assertion checks that
no more than 10 trials are ever in flight.

### Outputs

- **Energy:** the engine sums the accepted cosine sums over the B sites of each step. This
  equals the total lattice energy, because every bond has exactly one B end. It reports
  both the energy of each step and a running sum.
- **Counters:** trials, acceptances and the cycle count of the last step.
- **Host access:** while the engine is idle, the host writes and reads the angles and seeds.

## 2. iTEBD engine (`itebd_engine`)

### Stored state

The two-site unit cell is held as:

- four Db × Db matrices A↑, A↓, Bᵀ↑, Bᵀ↓. B is stored transposed, so that both A and B
  are indexed by "their own outer bond" first;
- two bond-weight vectors: λ1 on the outer bonds and λ2 on the shared bond.

### One iteration

One iteration applies the two-site gate U = exp(−τ H_ij) and re-splits the bond. The gate is
given by its three distinct elements, which are inputs:

- e0 = ⟨↑↑|U|↑↑⟩;
- e1 = ⟨↑↓|U|↑↓⟩;
- e2 = ⟨↑↓|U|↓↑⟩.

For τ = 0.01 their values are in `itebd_pkg`. The iteration has three stages:

1. **pre-SVD (`itebd_presvd`).**
   - Forms θab[i][j] = λ1[i] Σk A_a[i][k] λ2[k] B_b[k][j] λ1[j] for all four spin pairs.
     This uses four MACs per cycle: Db+1 cycles per (i, j).
   - Then applies the gate element by element: M↑↑ = e0 θ↑↑, M↑↓ = e1 θ↑↓ + e2 θ↓↑, and
     so on.
   - Writes M into the SVD array, one 2 × 2 quad per cycle.
   - Takes Db²(Db+1) + 1 cycles.
   - Rows of M are (a, i) and columns are (b, j), so M is 2Db × 2Db.
2. **SVD (`jacobi_svd`).**
   - Two-sided Jacobi in the Brent–Luk form. The 2Db indices are paired into Db pairs.
   - For each diagonal 2 × 2 block [[a, b], [c, d]], CORDIC gives:
     - g = atan2(c − b, a + d);
     - h = atan2(b + c, a − d);
     - left angle −(g + h)/2 and right angle (g − h)/2.

     These two rotations diagonalise the block.
   - Every pair of row pairs and column pairs is then rotated: M ← R(left) M R(right)ᵀ.
     U and V accumulate the same rotations. This happens one 2 × 2 block per cycle.
   - Afterwards the pairing is permuted. The permutation is even p → p+2 and odd p → p−2,
     except that 1 stays, 2 → 3 and 2Db−1 → 2Db (1-based). After 2Db − 1 such steps,
     every pair of indices has met once; that is one sweep.
   - The permutation is applied to an index table, so the data never moves.
   - The number of sweeps is an input. Eight are enough at Db = 30.
   - One step takes Db² + Db + 1 cycles. A full run takes
     n_sweeps·(2Db − 1)·(Db² + Db + 1) + 2 cycles (about 440 k cycles for Db = 30 with
     8 sweeps).
3. **post-SVD (`itebd_postsvd`).**
   1. Reads the diagonal and takes absolute values. A negative singular value has its sign
      moved into U.
   2. Selects the Db largest values (truncation).
   3. Forms their norm with chained CORDIC vectoring.
   4. Inverts the norm and λ1 with a serial divider (`fx_recip`, 81 cycles each). λ1
      entries below 2⁻²⁰ are clamped before inversion.
   5. Writes the new tensors: A'_b[k][j] = V[(b, j)][k] / λ1[j] and
      Bᵀ'_a[k][j] = ±U[(a, j)][k] / λ1[j].
   6. Sets λ1' = s/‖s‖ and λ2' = old λ1.

Writing U into B and V into A, and swapping the roles of λ1 and λ2, is the **A↔B exchange**.
It makes the next iteration act on the other kind of bond, so no separate exchange step
exists. One Db = 30 iteration with 8 sweeps takes about 471 k cycles, which is 4.7 ms.

### Host side and statistics

- **Host access:** while the engine is idle, the host loads and reads every array through
  one port: `host_sel` picks the array (0–5) and `host_row`/`host_col` pick the element.
- **Energy:** the engine does not compute it. The host reads the state back and evaluates
  ⟨θ|H|θ⟩/⟨θ|θ⟩; the testbenches show how.
- **Counters:** negative singular values, clamped λ entries and the cycle count of the
  last iteration.

### Number format

All iTEBD values are signed 64-bit fixed point with 40 fraction bits. Products are formed
at 128 bits and then rounded.

## 3. Where this design departs from, or fills in, the published description

- **Number formats.** The published design uses 64-bit floating point for the XY model, and
  floating point is implied for iTEBD. Both engines here are fixed point, with CORDIC for
  the trigonometry.
- **Sign of ΔE.** The printed energy-difference formula of the XY model has the opposite
  sign to the Hamiltonian it is derived from. The RTL follows the Hamiltonian:
  ΔE = E(θ') − E(θ).
- **Not specified in the source, and chosen here:**
  - the bit fields of the random numbers;
  - the exponential method;
  - the pipeline depth;
  - the number of Jacobi sweeps;
  - λ normalisation and clamping;
  - the host ports and energy accumulation.
- **One top for both engines.** The two algorithms were separate FPGA images originally.
  Here they are two engines under one top.
- **Not built:**
  - the host link and PC software;
  - the clock generator;
  - vendor BRAM and DSP primitives, which are inferred from arrays and `*` instead;
  - the extra lattices used only in a CPU-simulated scaling study (next-nearest-neighbour
    and square-octagonal).

## 4. How far it has been checked

Each block has a self-checking testbench in `tb/` that compares against an independent
double-precision model and checks the cycle counts given above:

- **`tb_xy_mc_engine`:** at L = 8 the angles match a double-precision Metropolis model bit
  for bit.
- **`tb_jacobi_svd`:** reproduces the published Db = 4 pairing sequences and checks
  orthogonality and reconstruction.
- **`tb_itebd_engine`:** runs 2000 iterations at Db = 4 and τ = 0.01 from a random state.
  The bond energy falls steadily to −0.431, against the exact chain value 1/4 − ln 2 = −0.443.
  A longer run converges further.
- **`tb_manybody_top`:** at L = 8 and Db = 4 it runs both engines at once and counts every
  mechanism:
  - accept and reject;
  - sublattice switch;
  - step completion and seed advance;
  - Jacobi sweep;
  - truncation;
  - negative singular value;
  - λ clamp;
  - A↔B exchange.
- **`tb_manybody_full`:** runs the top at its default size, L = 128 and Db = 30. It does one
  Monte Carlo step and one iTEBD iteration, which takes a few seconds in Verilator.

## 5. Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/cordic_pkg.sv rtl/xy_pkg.sv rtl/itebd_pkg.sv tb/tb_manybody_top.sv \
    --top-module tb_manybody_top -o sim && ./obj_dir/sim
```

Every testbench ends with a line `TB_RESULT checks=N failures=M`.

## 6. Synthesis note

The Jacobi array keeps M, U and V as register arrays so that a whole row pair can be
rotated at once. At Db = 30 that is 3 × 3600 × 64 bits, so generic synthesis of the full-size top is
slow and needs more than 16 GB of memory; on an FPGA these arrays would be split over many block RAMs.
