# MANOJAVAM(T, S): one datapath for covariance and Jacobi eigendecomposition

Principal component analysis has two steps. First it forms the covariance
matrix `C = XᵀX` of a centred data set `X` (M samples × N features). Then it
eigendecomposes `C`. The first step is a large matrix product. The classic
Jacobi method for the second step is also built from matrix products: every
iteration applies a plane (Givens) rotation `R`, so `C ← RᵀCR` and
`V ← VR`. This accelerator runs both steps on one matrix-multiplication
fabric. The fabric is S systolic arrays of T × T processing elements. A small
*Jacobian unit* beside it picks each rotation:

* it watches the product tiles as they leave the arrays;
* it finds the largest off-diagonal element `c_pq`;
* it turns that element into `cos θ` and `sin θ` with CORDIC arithmetic;
* it writes the four non-trivial entries of `R` into memory.

The next products then apply `R`. No separate rotation datapath exists.

The RTL is synthesizable SystemVerilog (IEEE 1800-2017). The default
configuration is **T = 4, S = 8** with **50 Jacobi iterations**. Other sizes,
for example T = 16, S = 32, are reached by parameter override on
`manojavam_top`.

After a run:

* the diagonal of `C` holds the eigenvalues;
* the columns of `V` hold the matching eigenvectors (one of two V buffers; the
  `v_sel` output says which).

The order is not sorted.

---

## 1. Everything is a tile

All storage and transport is organised in **T × T tiles** of 32-bit words:

* each external memory access reads or writes one whole tile;
* each cache line holds one whole tile;
* each engine step multiplies one tile pair.

A tile address (`taddr_t`, 24 bits) counts tiles, not bytes. A matrix with
`rows/T` tile rows and `cols/T` tile columns is stored in row-major tile order
from its base address. Tile `(r, c)` is therefore at `base + r·(cols/T) + c`,
and element `(i, j)` is at position `[i mod T][j mod T]` of tile
`(i/T, j/T)`.

Six matrices are involved. The caller supplies each base address:

| input     | matrix | size  | role |
|-----------|--------|-------|------|
| `x_base`  | X      | M × N | data set, written by the host before `start` |
| `c_base`  | C      | N × N | covariance, then the rotated covariance |
| `r_base`  | R      | N × N | Givens matrix of the current iteration |
| `t_base`  | T      | N × N | scratch product `C·R` |
| `v0_base` | V0     | N × N | eigenvector buffer |
| `v1_base` | V1     | N × N | eigenvector buffer |

`m_tiles = M/T` and `n_tiles = N/T` give the size. M and N must be multiples
of T. The host pads with zero rows or columns; a zero column only adds a
zero eigenvalue.

Writes carry a mask with one bit per tile element. The Givens controller uses
it to change a single matrix entry without reading the tile first.

## 2. The matrix engine (`mm_engine`)

```
            shared LHS cache ──► mpu_lhs ──(broadcast A tile)──┐
                                                               ▼
RHS cache s ──► mpu_rhs ──► systolic_array s ──► matrix_accumulator s   (s = 0..S-1)
```

**Processing element (`pe`).** A PE has three registers:

* a horizontal register that passes the left operand on to the right;
* a vertical register that passes the top operand down;
* an output register that accumulates the products (the MAC feeds back into
  it).

The array is *output-stationary*: `PE(i,j)` ends up holding element `(i,j)` of
the tile product.

**Skew (`mpu_lhs`, `mpu_rhs`).** Row i of the array must receive `A[i][k]` at
step `k+i`, and column j must receive `B[k][j]` at step `k+j`. The two
*matrix padding units* latch a tile and produce exactly that parallelogram
from a step counter. The LHS unit can also present the *transpose* of its
tile. That is how `Xᵀ` (covariance) and `Rᵀ` (rotation) are fed although only
X and R are stored.

**Step timing.** One engine step works like this:

1. `start` latches the LHS tile and the S RHS tiles.
2. The engine clears the arrays and clocks them for `3T−2` cycles.
3. In one more cycle, every *enabled* lane adds its product tile into its
   accumulator.

`done` follows `start` by exactly **3T cycles**. Steps do not overlap: the
arrays drain between tiles. The controller drives `lane_en` to switch off the
lanes that have no column block in the last, partial group.

## 3. Block streaming: the schedule (`top_controller`)

This section carries most of the design's behaviour.

Every pass computes one product `P = op(A) · B`, where `op` is the identity or
a transpose, over tiled matrices. For an output of `nr × nc` tiles and an inner
dimension of `K` tiles, the pass runs:

```
for r in 0 .. nr-1                       # one output row block
  for g in 0, S, 2S, ...                 # a group of up to S column blocks
    clear accumulators; lanes g+s < nc are enabled
    for k in 0 .. K-1
      A(r,k)  (or A(k,r) transposed)  → shared LHS cache → all lanes
      B(k,g+s)                        → private RHS cache of lane s
      one engine step
    write accumulator s to P(r, g+s) through the RHS cache of lane s
    (and hand it to the DLE if this pass is scanned)
```

The LHS tile is read once and broadcast to all S lanes. Lane `s` always
produces output column block `g+s`, so its private cache only ever sees its
own column of B.

A run goes through these phases:

| phase | product                | mode       | DLE scan |
|-------|------------------------|------------|----------|
| INIT  | writes the identity into R and V0 | COV | – |
| COV   | `C = Xᵀ · X` (K = M/T) | `MODE_COV` | yes |
| JAC   | DLE result → CORDIC → R written | `MODE_ROT` | – |
| ROT1  | `T = C · R`            | `MODE_ROT` | – |
| ROT2  | `C = Rᵀ · T`           | `MODE_ROT` | yes |
| ROT3  | `V_next = V_cur · R`   | `MODE_ROT` | – |

JAC to ROT3 repeat `NUM_ITER` times. The pivot of iteration *n+1* is found
during the ROT2 pass of iteration *n*, as those tiles stream past, so no pass
exists only to find the maximum. The two V buffers swap every iteration,
because a pass cannot overwrite a matrix it is still reading. Every pass
starts with a flush of all caches (one cycle). This keeps the S+1 independent
caches consistent with the matrices that the previous pass rewrote.

`mode` is the one-bit datapath mode. It is `MODE_COV` until the covariance
pass ends and `MODE_ROT` from the first JAC phase on. The caches change their
write policy on it.

**Cost.** A pass costs about `nr · ⌈nc/S⌉ · K` engine steps of 3T cycles, plus
cache misses. At default parameters with M = 16, N = 8, a whole run of 50
iterations takes about 32 000 cycles against a DRAM model with 4 cycles of
latency.

## 4. Caches with a mode-dependent write policy (`tile_cache`)

There are **S + 1** caches, each with its own controller:

* one shared LHS cache for the broadcast operand;
* one private RHS cache per lane.

All are direct-mapped with 64 lines of one tile each. Behaviour:

* **Reads.** A hit answers in one cycle. A miss fetches the tile, fills the
  line and answers.
* **Writes.** Every write goes through to memory. A write *hit* also updates
  the line.
* **Write miss in `MODE_COV`: write-around.** The line is left alone. The
  covariance output is not read again during the pass, so allocating it would
  only evict X tiles.
* **Write miss in `MODE_ROT`: write-allocate, no fetch.** The written tile is
  installed in its line without reading memory, because the whole tile is
  being written.

The `ev_hit`, `ev_miss`, `ev_wr_alloc` and `ev_wr_around` outputs pulse per
cache (bit 0 is the LHS cache) for observation.

## 5. The Jacobian unit (`jacobian_unit`)

```
accumulator tiles → DLE → (c_pq, c_pp, c_qq) → CORDIC arctan → 2θ → >>1 → θ → CORDIC sin/cos → Givens controller → memory
                     └──────────────────────── (p, q) ──────────────────────────────────────────┘
```

**Data lookup engine (`dle`).** Output tiles arrive with their row block `rb`
and column block `cb`. The DLE latches each tile and compares one element per
cycle against a running maximum of |value|.

*Tile-aware filtering* keeps the true diagonal out of that comparison. In a
tile with `rb == cb`, the elements with `i == j` lie on the main diagonal of C.
They are masked and stored in a diagonal register file (up to `MAX_N = 4096`
entries). Every other element is a candidate.

After `finish`, the DLE reports in two cycles:

* `c_pq`, `p` and `q`;
* `c_pp = diag[p]` and `c_qq = diag[q]`, whichever tiles those came from.

Of two equal magnitudes the first one seen wins. Because C is symmetric, that
gives `p < q`.

**Angle.** The rotation that zeroes `c_pq` has
`tan 2θ = 2c_pq / (c_pp − c_qq)`. The vectoring CORDIC gets `y = c_pq` and
`x = (c_pp − c_qq)/2`: the same ratio, but it cannot overflow. Inputs with
`x < 0` are folded by negating both coordinates. The result 2θ lies in
[−π/2, π/2]. An arithmetic shift right by one gives θ in [−π/4, π/4]. A
rotation-mode CORDIC, started from `(1/K, 0)`, rotates by θ and returns
`cos θ` and `sin θ` together. Each CORDIC has 16 stages, one result per cycle,
and a latency of 17 cycles.

**Givens controller (`givens_controller`).** `R` stays in memory as the
identity except for four entries:

```
R[p][p] = R[q][q] = cos θ,   R[p][q] = −sin θ,   R[q][p] = +sin θ
```

For each rotation the controller first restores the previous rotation's four
entries (1 on the diagonal, 0 elsewhere). Then it writes the new ones. It has
two write ports, each carrying one masked single-element write, so the four
entries take two paired write events. R is not rebuilt at all. The controller
of the whole design writes the identity into R once, at the start of a run.

## 6. Memory controller (`memory_controller`)

S + 3 requesters share the single external port:

* requester 0 is the LHS cache;
* requesters 1..S are the RHS caches;
* the last two are the Givens write ports.

Arbitration is round-robin, with one transaction in flight. A requester holds
`req` until a one-cycle `ack`, which comes with registered `rdata` for reads.
The external port follows the same protocol. `mem_req` stays up with the
command until the memory returns one `mem_ack`. Any latency works.

## 7. Number format and its limits

All datapath values are **Q15.16**: 32-bit two's complement with 16 fraction
bits. The package `manojavam_pkg` holds:

* the word, address and index types;
* the fixed-point multiply (full product, arithmetic shift right by 16);
* the arctangent table `atan(2⁻ⁱ)·2¹⁶`;
* the CORDIC gain constant `round(2¹⁶ / ∏√(1+2⁻²ⁱ)) = 39797`.

Angles are radians in the same format.

Because the format is fixed, the host must scale the data:

* **Range.** Every covariance entry must stay below 2¹⁵ in magnitude. For
  centred data with per-feature variance σ², the diagonal is about M·σ².
  Scale X so that this stays below 32 768.
* **Resolution.** Each product is rounded toward −∞ to 2⁻¹⁶. Each tile
  product therefore loses up to T·2⁻¹⁶, and a rotated entry picks up errors
  of order N·2⁻¹⁶ per iteration.

## 8. Using `manojavam_top`

1. Hold `rst` high for at least one clock.
2. Load X (and nothing else) into memory.
3. Give `m_tiles`, `n_tiles` and the six bases.
4. Pulse `start` for one cycle. Keep the size and bases stable until `done`.

During the run:

* `busy` is high;
* `iter` counts the iterations;
* `piv_p`, `piv_q`, `piv_cpq`, `rot_cos` and `rot_sin` show each rotation as
  it is chosen.

`done` then stays high. The results are in C and in V0 or V1, as `v_sel`
says.

Parameters: `T` (tile size), `S` (lanes), `NUM_ITER` (Jacobi iterations),
`LINES` (lines per cache, a power of two) and `MAX_N` (largest N the DLE
holds).

### Sizes of common PCA data sets at the default configuration

| data set | M × N | padded N | tiles of memory | compute lower bound at 200 MHz |
|---|---|---|---|---|
| MNIST 8×8 | 1797 × 64 | 64 | 8 480 | ≈ 0.01 s |
| MNIST 28×28 | 70000 × 784 | 784 | 3.6 M | ≈ 14 s |
| CIFAR-10 | 60000 × 3072 | 3072 | 14.5 M | ≈ 580 s |
| Olivetti faces | 400 × 4096 | 4096 | 5.3 M | ≈ 1 200 s |
| Breast cancer | 45312 × 7 | 8 | 22 676 | < 1 ms |
| 20 Newsgroups | 18846 × 1024 | 1024 | 1.5 M | ≈ 21 s |

All of them fit the 2²⁴-tile address space and `MAX_N`. The time column counts
only engine steps and DLE scans. Memory stalls come on top, and they dominate
at small sizes. The run time is large because each rotation is applied as
three full N × N products.

## 9. Simulating

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and stops, and each has a cycle watchdog.
With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/manojavam_pkg.sv tb/tb_manojavam_top.sv --top-module tb_manojavam_top \
    -Mdir obj -o sim && obj/sim
```

Replace `tb_manojavam_top` with any other testbench name. `tb/ddr3_model.sv` is
the behavioural DRAM used by the testbenches that need memory: a tile array
with a fixed latency and masked writes.

`tb_manojavam_top` runs the whole design at its default parameters (T = 4,
S = 8, 50 iterations) on a random 16 × 8 data set, in about 0.1 s of wall
clock. It checks:

* C after the covariance pass, bit-exact against a fixed-point reference;
* the final diagonal against a floating-point Jacobi run with the same pivot
  rule;
* the off-diagonal energy against that run;
* `VᵀV = I`;
* `Vᵀ C₀ V = C_final`.

It also counts each mechanism of the design and fails if one never happens:

* the mode switch;
* cache hits and misses;
* write-around and write-allocate writes;
* disabled lanes;
* transposed fetches;
* restores of the Givens entries.

The block testbenches:

* check the systolic array, padding units and engine for exact products and
  exact cycle counts;
* check the CORDIC units against real-valued `atan`, `sin` and `cos` to
  2·10⁻⁴;
* check the DLE and the Givens controller against searches and models written
  in the testbench;
* check the top-level controller's schedule step by step against a loop nest.

`tb_workload_pca` runs two realistic sizes at the default parameters, each on
its own instance built by the helper `workload_case`:

* **Digits.** 1797 samples × 64 features, the shape of the 8×8
  handwritten-digit set, padded to 1800 samples. About 7.5 M cycles.
* **Breast cancer.** 45312 samples × 7 features, padded to 8 features. About
  0.9 M cycles.

The data is synthetic: a few planted components plus noise. Both cases
together take about 30 s of simulation. Each case checks:

* C, bit-exact;
* at every rotation, that the pivot is exactly the largest off-diagonal
  magnitude in memory;
* that the off-diagonal energy falls at every rotation whose pivot is not lost
  in rounding;
* trace preservation;
* `VᵀV = I` and `Vᵀ C₀ V = C_final`.

The (16, 32) configuration has also been simulated. It used `tb_manojavam_top`
with `T = 16`, `S = 32`, `N = 64` and `M = 32` set in its local parameters and
passed on the top instance. All 12 363 checks passed, in 351 700 cycles. The
Verilator build at that size takes a few minutes and about 1 GB of memory.

## 10. Where this RTL departs from the original description, and why

* **Rotation signs.** The original gives `R_pq = +sin θ`, `R_qp = −sin θ`
  together with `θ = ½·atan(2c_pq/(c_pp − c_qq))`. With those signs,
  `(RᵀCR)_pq` is not zero. This RTL uses the opposite signs, the ones that
  zero the pivot, as the method requires.
* **When the pivot is reported.** The original describes the DLE reporting
  once "for a given row block". The Jacobi method needs the maximum over the
  whole matrix. Here the DLE reports once per complete pass.
* **One iteration = one rotation.** The fixed count of 50 applies to single
  rotations (one pivot each), not to full sweeps over all index pairs.
* **How RᵀCR is computed.** The original says the engine applies the
  rotations but not how. Here, RᵀCR takes two full products and VR one.
  Three dense passes per rotation are simple and reuse the engine as is, but
  they cost O(N³) each. A datapath that touched only rows and columns p and q
  would be much faster and is not built.
* **Sine and cosine.** One rotation-mode CORDIC gives both. The original draws
  two units.
* **Dual-port memory of the Givens controller.** This is modelled as two write
  ports into the arbiter. The external memory itself stays single-ported.
* **Choices the original leaves open.** These are this design's own:
  * the word format and CORDIC depth;
  * cache size, write-through and flush per pass;
  * arbitration;
  * reset style (synchronous, active high);
  * the non-overlapped 3T-cycle engine step.
* **Multiplier count.** The default has one 32-bit multiplier per PE: 128 for
  T = 4, S = 8. The original reports 64 DSP blocks for that configuration, so
  its PEs are evidently narrower or shared.
* **What is not included.** The DRAM itself and its physical interface. The
  top brings out a tile-wide memory port instead.
