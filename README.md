# Tight-binding electronic structure as a hardware pipeline

Semi-empirical tight-binding methods compute the electronic energy of a molecule in a fixed sequence of steps:

1. Build a Hamiltonian matrix from the atomic coordinates. Every element depends only on two orbitals and their two centres.
2. Diagonalise the matrix.
3. Sum the occupied orbital energies.

This RTL implements that sequence as a chain of independent hardware stages. The stages are joined by valid/ready streams. Geometries are streamed through the device one after another, with no processor involved between them.

Two methods share the same chain. They differ only in the stage that produces Hamiltonian elements:

- **Extended Hückel theory (EHT), EHNDO form.**
  - H<sub>mn</sub> = k<sub>m</sub> k<sub>n</sub> (ε<sub>m</sub> + ε<sub>n</sub>) S<sub>mn</sub>, with ε<sub>m</sub> on the diagonal.
  - S is the analytic overlap of Gaussian s and p orbitals.
- **Non-self-consistent DFTB (DFTB0).**
  - Elements come from tabulated two-centre integrals, interpolated on a radial grid and combined by the Slater–Koster rules.
  - A short-range repulsive pair energy from a cubic spline is added to the total energy.

A third configuration is the **stand-alone Hamiltonian generator**. It drops the diagonaliser and duplicates the pair generator and the DFTB0 element evaluator. It then streams out two Hamiltonian elements per clock cycle.

The default build is sized for n-hexadecane, C16H34: 98 orbitals on 50 atoms in an s/p minimal basis on carbon and s on hydrogen. A batch can hold up to ten geometries.

## 1. Dataflow

```
 coordinate memory ──► coord_loader ──(x,y,z) per orbital, broadcast──┐
                                                                      │
 pair_gen ──(i,j) orbital pairs──► eht_eval  or  dftb0_eval ◄─────────┤
     │                                  │ (i,j,H_ij), 1 per cycle     │
     │                                  ▼                             │
     │                            ham_assembly ──full H──► jacobi_eig │
     │                                                        │ eps_k │
     └──(a,b) atom pairs──► rep_eval ──E_rep──► energy_eval ◄─┘       │
                                                   │ E per geometry   │
 hgen_standalone (even/odd pair_gen + 2 x dftb0_eval + helem_merge) ◄─┘
                                                   │ 2 elements / beat
```

Every arrow is a valid/ready stream whose outputs are registered. A stage works whenever its inputs are valid and its output is free. The whole chain therefore runs like a software task graph, but at one element per cycle.

Two buffers let consecutive geometries overlap:

- **Two coordinate banks in each evaluator.** One bank fills with the next geometry while the other is in use.
- **The Hamiltonian buffer (`ham_assembly`).** It accepts the next matrix as soon as the solver has copied the current one out.

Diagonalisation costs O(N³) and everything else O(N²). In the full workflow the Jacobi solver is therefore the bottleneck, and batching geometries gains little. In the stand-alone generator, overlap between geometries does pay.

## 2. Number format and shared types (`tb_fx_pkg`)

All arithmetic is 48-bit two's-complement fixed point with 24 fractional bits, type `fx_t`:

- resolution about 6·10⁻⁸;
- range ±8·10⁶;
- lengths in bohr, energies in hartree.

Arithmetic units:

| Operation | Implementation |
|---|---|
| multiply | full product, then shifted |
| divide | 72-bit integer division; divide-by-zero returns 0 |
| square root | bit-serial integer square root of a·2²⁴ |
| e<sup>−x</sup> | 2<sup>−n</sup>·p(f), with p a degree-8 polynomial |

Each of these is one combinational function placed in its own pipeline stage. A synthesis flow would need to retime or split the divider and the square root to reach 100 MHz.

Shared structs:

- `coord_t` {x, y, z}
- `pair_t` {i, j}
- `helem_t` {i, j, h}
- `orb_desc_t`, the per-orbital constants:
  - atom index;
  - species (0 = H, 1 = C);
  - angular type (s, px, py, pz);
  - Gaussian exponent α and prefactor d;
  - on-site energy ε;
  - EHNDO factor k.

Indices are 10 bits wide, enough for 770 orbitals (C128H258).

## 3. Pair generation (`pair_gen`)

The double loop over orbitals is flattened into one stream of upper-triangle pairs (i, j), i ≤ j, in row order. That gives NPAIR = N(N+1)/2 pairs per geometry at one pair per cycle.

The walker keeps only (i, j) and one counter: j := j+1, and on j = N it moves to i := i+1, j := i. Every downstream stage receives the pair as data and never nests a loop itself.

The same module has two more features:

- **Second stream of atom pairs.** It emits all (a, b) with a < b for the repulsive energy. It runs independently of the orbital stream.
- **Stride-2 mode.** This is used by the stand-alone generator.
  - The even instance starts at (0, 0) and the odd instance at (0, 1).
  - Each walks: if j < N−2 then j += 2; if j = N−2 then i += 1, j = i; otherwise i += 1, j = i+1.
  - Together they cover the flat order exactly once: the even walker takes positions 0, 2, 4, … and the odd walker 1, 3, 5, ….
  - The even walker emits ⌈NPAIR/2⌉ pairs and the odd walker ⌊NPAIR/2⌋, so the two halves are disjoint.

## 4. Element evaluators

Both evaluators accept one pair per cycle. Each reads the coordinates of orbitals i and j from its active bank and produces `helem_t`. The pipeline stalls as a whole when the output is not taken. A bank is released after the evaluator has seen its share of the geometry's pairs.

**`eht_eval`** has 9 stages:

1. Operand fetch.
2. p = α<sub>m</sub> + α<sub>n</sub>, α<sub>m</sub>α<sub>n</sub>, and R².
3. 1/p.
4. q = α<sub>m</sub>α<sub>n</sub>/p and π/p.
5. √(π/p), qR², and q/p.
6. (π/p)<sup>3/2</sup> and e<sup>−qR²</sup>.
7. S<sub>ss</sub> and the angular factor.
8. S.
9. H.

The angular factors for s–p, p–s and p–p come from the closed-form Gaussian overlap: −(α<sub>m</sub>/p)R<sub>a</sub>, (α<sub>n</sub>/p)R<sub>a</sub>, 1/(2p) − (α<sub>m</sub>α<sub>n</sub>/p²)R<sub>a</sub>², and −(α<sub>m</sub>α<sub>n</sub>/p²)R<sub>a</sub>R<sub>b</sub>. Each orbital is a single Gaussian.

**`dftb0_eval`** has 8 stages: R², R, 1/R and grid position, direction cosines and grid index, one table read, interpolation, and Slater–Koster combination.

The key trick is the table format:

- Grid point i stores (y<sub>i</sub>, Δy<sub>i</sub> = y<sub>i+1</sub> − y<sub>i</sub>).
- Linear interpolation is then one read plus one multiply-add, y = y<sub>i</sub> + t·Δy<sub>i</sub>.
- In this design one table word holds the σ tuple and the π tuple side by side, so a p–p element also needs only one read.

The table address is {species<sub>m</sub>, species<sub>n</sub>, channel, grid index}, with channel 0 = ss, 1 = sp, 2 = ps, 3 = pp. The grid starts at R = 0 with spacing 1/INV_DR. Distances beyond the last grid point give 0, which acts as the cut-off.

The Slater–Koster rules are:

| Orbitals | Element |
|---|---|
| s, s | V<sub>ssσ</sub> |
| s, p<sub>a</sub> | c<sub>a</sub>V<sub>spσ</sub> |
| p<sub>a</sub>, s | −c<sub>a</sub>V<sub>psσ</sub> |
| p<sub>a</sub>, p<sub>b</sub> | c<sub>a</sub>c<sub>b</sub>(V<sub>σ</sub> − V<sub>π</sub>) + δ<sub>ab</sub>V<sub>π</sub> |

Two orbitals on the same atom give ε on the diagonal and 0 off it.

## 5. Repulsive energy (`rep_eval`)

The repulsive potential of each pair type (H–H, C–H, C–C) is one cubic spline on an equidistant grid, evaluated by Horner's rule on the distance r:

V(r) = c<sub>0</sub> + r(c<sub>1</sub> + r(c<sub>2</sub> + r·c<sub>3</sub>))

How it works:

- **Atom positions.** They are rebuilt from the per-orbital coordinate stream through the orbital-to-atom map. There are two banks, as in the evaluators.
- **Front end.** Two stages compute r and the segment index.
- **Horner engine.** It reads c<sub>3</sub>, c<sub>2</sub>, c<sub>1</sub>, c<sub>0</sub> from one memory in four consecutive cycles, so one pair takes four cycles. The last multiply-add of one pair overlaps the first read of the next.
- **Output.** After the last atom pair of a geometry, the sum leaves on the `erep` stream.

At C16H34 this is 1225 pairs × 4 = 4900 cycles per geometry, far below the solver's time, so the repulsive energy is hidden completely.

## 6. Assembly and diagonalisation

**`ham_assembly`**

- Writes each element at its upper-triangle address of an N×N buffer. Elements may arrive in any order.
- Raises `full` after NPAIR elements.
- Refuses input until the solver pulses `release_mat`.
- Serves reads of (i, j) and (j, i) alike, one cycle after the address.

**`jacobi_eig`** is a sequential cyclic Jacobi solver. This is the block that decides run time.

1. **COPY.** Reads the N² words of H into its working matrix A (N² cycles), sets V = I, and releases the buffer.
2. **Sweeps.** Each sweep visits every (p, q), p < q, in row order. Each visit costs 2 cycles. When |A<sub>pq</sub>| > TOL, a rotation is performed:
   - θ = (A<sub>qq</sub> − A<sub>pp</sub>)/(2A<sub>pq</sub>);
   - t = sgn θ / (|θ| + √(θ²+1));
   - c = 1/√(t²+1), s = t·c, τ = s/(1+c);
   - A<sub>pp</sub> −= t·A<sub>pq</sub>, A<sub>qq</sub> += t·A<sub>pq</sub>, A<sub>pq</sub> = 0;
   - then one cycle per row k updates A<sub>kp</sub>, A<sub>kq</sub>, V<sub>kp</sub>, V<sub>kq</sub>.

   A rotation costs 6 + N cycles on top of the visit.
3. **Stop rule.** The solve ends after the first sweep that needed no rotation, or after MAX_SWEEPS sweeps.
4. **Output.** The eigenvalues leave in index order, unsorted. Column k of V is the eigenvector of eigenvalue k and can be read through `vec_*`. The sweep and rotation counts of the last solve are outputs.

Total cycles from a full matrix to the first eigenvalue:

&nbsp;&nbsp;&nbsp;&nbsp;2 + N² + sweeps · N(N−1)/2 · 2 + rotations · (6 + N)

The testbenches check this formula exactly.

Run time depends on the geometry through the number of sweeps. At C16H34 (EHT, one all-trans chain) the solver needed 10 sweeps and 26,617 rotations, about 2.88 M cycles in total (28.8 ms at 100 MHz). For DFTB0 at the same size it needed 9 sweeps and about 2.29 M cycles.

**`energy_eval`** computes E = 2·Σ (the n_occ lowest eigenvalues) + E<sub>rep</sub>, with E<sub>rep</sub> only in DFTB0 mode.

- Eigenvalues are inserted into a sorted register array as they arrive, so the stream never stalls.
- The n_occ lowest are then summed, one per cycle.
- The matching E<sub>rep</sub> is taken from a 4-entry FIFO, and E leaves n_occ + 3 cycles after the last eigenvalue.

## 7. Stand-alone generator (`hgen_standalone`, `helem_merge`)

The generator has two branches:

- an even pair walker feeding its own DFTB0 evaluator;
- an odd pair walker feeding another.

The coordinate stream is broadcast: a token is accepted only when both evaluators can take it. Each evaluator keeps its own copy of the Slater–Koster table, and each releases its bank after its own share of the pairs.

`helem_merge` pairs the two streams into beats of two elements, {odd, even}, with a 2-bit `keep` mask. When NPAIR is odd, the last beat of each geometry carries only the even element (`keep = 01`). The output is in the same flat order as the full workflow.

Throughput:

- **Steady state.** One beat per cycle, so a geometry takes about NPAIR/2 cycles after the pipeline has filled.
- **C16H34.** 2426 beats leave in 2731 cycles from start, including loading the coordinates at three words per orbital. That corresponds to 27.3 µs at 100 MHz.
- **C128H258.** NPAIR/2 is 148,418 cycles, about 1.48 ms at 100 MHz.

## 8. Top level (`tb_workflow_top`) and how to drive it

| Parameter | Default | Meaning |
|---|---|---|
| N_ORB | 98 | orbitals (C16H34) |
| N_ATOM | 50 | atoms |
| MAX_GEOM | 10 | geometries per batch |
| N_GRID, SK_INV_DR | 512, 50 | Slater–Koster grid: 512 points, 0.02 bohr apart |
| N_SEG, REP_INV_DR | 128, 32 | repulsive spline: 128 segments of 1/32 bohr |
| MAX_SWEEPS | 30 | Jacobi sweep cap |

Host sequence:

1. **Orbital constants.** Write one `orb_desc_t` per orbital: `orb_we`, `orb_waddr`, `orb_wdata`.
2. **DFTB0 tables.**
   - Slater–Koster table: `sk_*`. A word is {y<sub>σ</sub>, Δy<sub>σ</sub>, y<sub>π</sub>, Δy<sub>π</sub>} at the address of §4.
   - Repulsive spline: `rep_*`. The address is {pair type (0 = HH, 2 = HC, 3 = CC), segment, k}, and the word is c<sub>k</sub>.
3. **Coordinates.** Write them with `coord_*`. Word (g·N_ORB + i)·3 + k holds component k of orbital i of geometry g. All orbitals of one atom carry the atom's position.
4. **Start.** Pulse `start` with `mode` (MODE_EHT, MODE_DFTB0 or MODE_HGEN), `n_geom` and `n_occ`.
5. **Results.**
   - EHT and DFTB0: E for each geometry arrives in order on `energy_*`.
   - MODE_HGEN: the element beats arrive on `h_*`.
   - `busy` falls when the batch is done.

## 9. Where this design departs from the paper's description

The published system is written in high-level synthesis and built as one bitstream per method, molecule size and batch size. This RTL keeps its structure and its per-stage rules but makes these choices:

- **Fixed point instead of floating point.** With the test parameters used here, the energies agree with a double-precision model at C16H34 to 1.7·10⁻⁴ hartree (EHT) and 5.8·10⁻⁴ hartree (DFTB0).
- **One top with a run-time mode.** It holds both evaluators and the stand-alone generator, selected by `mode`. The molecule size and batch capacity are still build-time parameters, so a smaller molecule needs a build with its own N_ORB and N_ATOM. This matches the original per-size builds.
- **Diagonaliser written from scratch.** The original uses a vendor library solver whose internals are not published. `jacobi_eig` is the textbook cyclic method with this design's threshold and sweep cap. At C16H34 it takes about 29 ms per EHT geometry, where the published EHT workflow needs about 135 ms. Run times of the full workflow should therefore not be compared one-to-one.
- **Stride-2 walkers stop at their share.** In the even/odd walkers, the original code excerpt loops NPAIR times in both generators, while the text describes disjoint halves. The walkers here stop after their share.
- **Energy formula.** The energy stage is only named in the original. The closed-shell band energy plus E<sub>rep</sub> is this design's choice.
- **Data choices of this design.** The table grid sizes, spline sizes, one Gaussian per orbital, the table word layout, the two-element output beat and all handshakes are this design's own.
- **Host interface.** The soft processor, UART, timer and power monitor of the original board setup are not part of this RTL. Host-side write ports replace them.

## 10. Verification

Each block has a self-checking testbench in `tb/` that prints `TB_RESULT checks=… failures=…`. Each compares against values computed independently in the testbench, in double-precision `real` arithmetic, and checks cycle counts where a rate is defined.

| Testbench | What it checks |
|---|---|
| `pair_gen_tb` | full and stride-2 orders against a software walk, disjointness and coverage of the two halves, atom pairs, one pair per cycle, back-pressure |
| `coord_loader_tb` | token contents, 3 cycles per token, stalls |
| `eht_eval_tb` | all s/p overlap cases against the analytic formulas (2·10⁻⁵), one element per cycle |
| `dftb0_eval_tb` | Slater–Koster combinations and interpolation against a model, cut-off, one element per cycle |
| `rep_eval_tb` | spline sums over eight geometries, out-of-range pairs, output stalls, four cycles per pair |
| `ham_assembly_tb` | random element order, full/refuse/release, mirrored reads, one element per cycle |
| `jacobi_eig_tb` | residual ‖Av − λv‖, orthonormality, trace, the exact cycle formula, skip-only sweep on a diagonal matrix |
| `energy_eval_tb` | sorted sums for several n_occ, E<sub>rep</sub> FIFO, latency, output hold |
| `helem_merge_tb` | beat contents and keep mask under random gaps and back-pressure, one beat per cycle |
| `hgen_standalone_tb` | every element of three geometries, half-full last beats, NPAIR/2 beats per geometry |
| `tb_workflow_top_tb` | methane, end to end (see below) |
| `tb_workflow_top_full_tb` | default parameters (C16H34), see below |
| `hgen_c128h258_tb` | stand-alone generator at 770 orbitals (C128H258), see below |

`tb_workflow_top_tb` runs methane end to end in all three modes, with mode switches, batches of three geometries, a hydrogen beyond both cut-offs and random back-pressure. It counts how often each mechanism occurs and fails if any never does.

`tb_workflow_top_full_tb` uses the default parameters (C16H34) and takes about 30 s of simulation:

- one EHT geometry through the whole workflow, checked against a double-precision model;
- the same geometry through the whole DFTB0 workflow, including the repulsive spline. The energy is checked against a model within 5·10⁻³ hartree; the measured difference is 6·10⁻⁴. The solver needed 9 sweeps and the run took 2,289,353 cycles;
- one stand-alone run, with all 4851 elements checked and a cycle count compared with the published 0.0286 ms.

`hgen_c128h258_tb` builds the stand-alone generator for the largest published molecule, C128H258 (770 orbitals, 296,835 elements per geometry). It runs one geometry and then a batch of ten, and checks every element. The measured times are 149,199 cycles for the single geometry and 148,496 cycles per geometry in the batch of ten. The published times are 1.4986 ms and 1.4897 ms, which at 100 MHz are 149,860 and 148,970 cycles. Both measured counts sit just above the limit of two elements per cycle, 148,418 beats. The simulation takes a few seconds.

Simulate with plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv rtl/tb_fx_pkg.sv \
          tb/tb_workflow_top_tb.sv --top-module tb_workflow_top_tb -Mdir obj && obj/Vtb_workflow_top_tb
```

Lint warnings that remain are of three kinds:

- unused package constants;
- unused high bits of shared index types;
- `SYNCASYNCNET`, because the same reset drives asynchronous flops and the `disable iff` of the handshake assertions.
