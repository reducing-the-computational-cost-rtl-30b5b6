# Quad-tile tensor-network accelerator

Tensor-network algorithms such as iTEBD (infinite time-evolving block
decimation) and HOTRG (higher-order tensor renormalization group) spend
nearly all their time in two operations: contracting tensors and taking
singular value decompositions. On a processor both cost a power of the bond
dimension D_b, the size of the virtual tensor indices. Contracting two
D_b-sized matrices costs O(D_b^3), for example.

This design turns that cost into area instead of time. Every tensor is cut
into **quad tiles**, 2x2 groups of elements. Each tile has its own small
memory, and each pair of tiles that must meet has its own processor. Only the
parts of the work that cannot be split stay serial:

* **Contraction**: all tile products are formed in one clock. Only the sum
  over the tile index of the contracted dimension is serial, so the time is
  O(D_b) instead of O(D_b^3).
* **SVD** (two-sided Jacobi): one rotation step of the whole matrix takes a
  fixed number of clocks, whatever its size. A sweep is D_b - 1 steps, so a
  decomposition with a fixed number of sweeps takes O(D_b) time.

The RTL is parameterized by the bond dimension `DB`. Its default, DB = 12, is
the largest bond dimension of the iTEBD evaluation that motivated it.
The code is SystemVerilog-2017. Verilator's `-Wall` lint reports only unused
parameters and deliberately open output pins, and the design simulates with
plain Verilator.

## Numbers and tiles

Each tensor element is a signed 32-bit fixed-point number with 24 fraction
bits (Q8.24). The range is ±128 and the resolution 6e-8. Overflow wraps:
nothing saturates, and nothing flags an overflow. Angles are radians in the
same format. These choices, and the constants, are in `tn_pkg`.

A tile is the packed struct `tile_t {e00, e01, e10, e11}`, where `eRC` is row
R and column C of the 2x2 block. The element at row r and column c of a
matrix sits in tile (r/2, c/2), in element {r%2, c%2}. Throughout, an index
x is written as x = 2X + x': the upper-case X is the tile index and the
primed x' is the position inside the tile.

| file | role |
|---|---|
| `tn_pkg.sv` | format, `tile_t`, fixed-point helpers, CORDIC table |
| `quad_tile_sram.sv` | memory of one tile: element write port, whole-tile read |
| `tile_mul.sv` | 2x2 tile product, the elementary operation of both engines |
| `contract_engine.sv` | quad-tile contraction |
| `cordic.sv` | atan2 and cos/sin |
| `jacobi_angle.sv` | angles of one diagonal tile (the SVD's angle layer) |
| `jacobi_rotator.sv` | rotation of one tile of M, U, V (the SVD's rotation layer) |
| `svd_engine.sv` | systolic Jacobi SVD array and its controller |
| `tn_accel_top.sv` | tile memories, both engines, host port |

## Contraction engine

`contract_engine` computes

    M[j][i][l] = sum_k A[i][k] * B[j][l][k]

directly into the layout the next step needs: rows j, columns i and l
grouped. It never builds an intermediate tensor that then has to be
transposed or reshaped. The indices i, j and k are cut into tiles of size
two. The index l is not cut; it has NL values. The tile counts are NI, NJ and
NK. The engine has two compute layers.

1. **Multiply layer.** For every (K, J, I, L) at once, a `tile_mul` forms
   the intermediate tile

       P[K][J][I][L] = B_tile[J][L][K] * transpose(A_tile[I][K])

   This is the sum over k' inside the tile. There are NI·NJ·NL·NK tile
   multipliers, with eight multipliers each, and one clock edge registers
   all their results.
2. **Summation layer.** Each output tile has one accumulator. The
   intermediate tiles form a shift register along K, so every accumulator
   adds the slice at K = 0 while the slices move down by one. The sum over K
   therefore takes NK clocks.

In output tile (J, I, L), element [j'][i'] holds M[2J+j'][2I+i'][l]. With
NL = 1 this is tile (J, I) of the matrix M with rows j and columns i, which
is what the SVD engine takes as input.

Timing: `done` pulses **NK + 1** clocks after the clock that takes `start`.
This is one clock for the multiply layer and one per K tile. The time grows
with the tile count of one index only. The multiplier count grows as NB^3
(432 tile multipliers at DB = 12, NL = 1). A binary-tree reduction would make
the summation O(log D_b) at the cost of more adders; it is not built.

## SVD engine

`svd_engine` decomposes an N x N real matrix into M = U Λ V^T with two-sided
Jacobi rotations. M, U and V are each kept as (N/2) x (N/2) tiles. A start
loads M and sets U = V = I. Each Jacobi step then has three parts.

### 1. Angle layer (diagonal tiles)

Each of the N/2 diagonal tiles [a b; c d] has a `jacobi_angle` processor.
All of them work in parallel. The processor finds the angles for which
J(θl)^T · [a b; c d] · J(θr) is diagonal, with J(θ) = [cos θ, sin θ; −sin θ,
cos θ]:

    θsum  = atan2(c + b, d − a)      folded into [−π/2, π/2]
    θdiff = atan2(c − b, d + a)      folded into [−π/2, π/2]
    θl = (θsum − θdiff) / 2          θr = (θsum + θdiff) / 2

To fold an angle is to add or subtract π until it lies in [−π/2, π/2]. The
2x2 problem is solved by θ and by θ ± π alike. The fold picks the smallest
rotations (|θl|, |θr| ≤ π/2), which Jacobi methods need in order to
converge. Without the fold, the sweeps were seen to stall: off-diagonal
entries of order one moved between tiles and never shrank.

Two CORDIC units run in lock step. They first work in vectoring mode, for the
two arctangents, and then in rotation mode, for cos and sin of θl and θr. The
processor keeps the angles and their cosines and sines in registers. These
registers are the "θ^l" (U side) and "θ^r" (V side) stores of the array.

### 2. Rotation layer (all tiles)

Tile (p, q) is rotated by the left angle of diagonal tile p and the right
angle of diagonal tile q (`jacobi_rotator`: four `tile_mul`, two of them in
series):

    M(p,q) ← J(θl_p)^T · M(p,q) · J(θr_q)
    Ut(p,q) ← J(θl_p)^T · Ut(p,q)
    Vt(p,q) ← J(θr_p)^T · Vt(p,q)

U and V are held **transposed** (`Ut`, `Vt`), so each update acts on rows
only. After any number of steps, `M_now = Ut · M_start · Vt^T`.

### 3. Systolic exchange

Between steps, rows and columns move, so that every pair of indices meets
once in a diagonal tile. Rows and columns use the same permutation. Rows of
Ut and Vt follow the rows of M. Think of the N positions as N/2 tiles, each
with a top position (2t) and a bottom position (2t + 1). Position 0 never
moves. The other N − 1 positions form a ring, and each step moves every
element one place along it:

    top(1) → top(2) → … → top(N/2−1) → bottom(N/2−1) → … → bottom(1) → bottom(0) → top(1)

For N = 6 the positions move 1 → 2 → 4 → 5 → 3 → 1. In terms of where each
element comes from, new[2] = old[1], new[4] = old[2], new[5] = old[4],
new[3] = old[5] and new[1] = old[3]. No element moves further than the next
tile, which keeps the wiring local. This is the round-robin ("chess
tournament") ordering. After N − 1 steps every index pair has shared a
diagonal tile once (one **sweep**), and the ordering is back where it
started.

The rotation and the exchange are written back at the same clock edge.

### Stopping and timing

After each sweep, the largest off-diagonal magnitude is compared with the
`tol` input. The engine stops with `converged = 1` when that magnitude is at
most `tol`. It also stops, with `converged = 0`, once `max_sweeps` sweeps
have run. Random 6x6 and 12x12 matrices converge to a `tol` of 2^-12 or
2^-13 in 3 to 5 sweeps.

| quantity | clocks |
|---|---|
| CORDIC operation | ITER + 1 |
| angle layer (`jacobi_angle`) | 2·ITER + 3 |
| one Jacobi step | STEP = 2·ITER + 5 (independent of N) |
| whole SVD, S sweeps | 1 + S·((N − 1)·STEP + 1) |

With the defaults (ITER = 24, N = 12), one step is 53 clocks, one sweep 584,
and a five-sweep SVD 2921 clocks.

The results are `m_out` = Λ, `u_out` = U^T and `v_out` = V^T. The diagonal
of Λ is neither sorted nor made positive, so a singular value can appear with
a negative sign. For a symmetric input it is then an eigenvalue.

## Top level and host port

`tn_accel_top` (parameters `DB`, `NL`, `ITER`; NB = DB/2) holds these tile
memories:

* A: NB x NB tiles;
* B: NB x NL x NB tiles;
* S: NB x NB tiles, a matrix for the SVD.

Its two engines are the contraction engine (NI = NJ = NK = NB) and the SVD
engine (N = DB). The SVD takes its input from S when `svd_src = 0`. When
`svd_src = 1` it takes the l = 0 slice of the contraction result, so a
contraction can be followed by the SVD of its result without moving data.

| port group | signals | notes |
|---|---|---|
| write | `wr_en`, `wr_bank` (0 A, 1 B, 2 S), `wr_row`, `wr_col`, `wr_l`, `wr_data` | one element per clock; A: row i, column k; B: row j, column k, `wr_l` = l |
| contraction | `contract_start`, `contract_busy`, `contract_done` | done is a one-clock pulse |
| SVD | `svd_start`, `svd_src`, `svd_tol`, `svd_max_sweeps`, `svd_busy`, `svd_done`, `svd_converged`, `svd_sweeps`, `svd_steps` | |
| read | `rd_bank` (0 M, 1 Λ, 2 U^T, 3 V^T), `rd_row`, `rd_col`, `rd_l`, `rd_data` | registered: data one clock after the address |

The engines do not check on each other. The host must start the SVD only
after the contraction has finished, and must not write A or B while a
contraction runs. Neither engine takes a new start while it is busy.

## Relation to the published design

The design follows a published FPGA study of iTEBD and HOTRG that gives its
circuits as block diagrams and equations. That study ran them through a
high-level-synthesis tool and gives no RTL.

**Taken from the original:** the quad-tile partitioning and one memory per
tile; the contraction as a fully parallel tile-product layer followed by a
serial sum over the contracted tile index; the direct layout of the result
without a permute or reshape; the Jacobi SVD with 2x2 diagonal-tile angle
processors, rotation of every tile of M, U and V, systolic exchange, and
sweeps repeated until a set precision is reached; the size DB = 12.

**Choices of this design, where the original is silent:** the Q8.24 number
format; CORDIC for the trigonometry; the closed-form angle formulas and the
angle fold; real rather than complex (Hermitian) arithmetic; the round-robin
exchange ring; the stopping rule; the start/busy/done handshakes; the host
port; and the option of feeding the SVD from the contraction.

**Differences worth knowing:**

* The original writes the rotation of tile (i, j) with the right angle of
  row tile i. This RTL uses the right angle of column tile j, as two-sided
  Jacobi needs; with the row angle the diagonal tiles of the next step would
  not be consistent.
* The original states that the element ordering returns after 2·D_b − 1
  systolic steps. The ring used here returns after D_b − 1 steps, and every
  pair still meets once per sweep.
* The original reports a "pipelined" style, driven by four staggered time
  sequences, one per element position of a tile. It gives no waveforms or
  schedule for them. Here each engine runs one operation at a time.
* The algorithms' own sequencing is not in hardware. That covers the
  iTEBD update with its gate, truncation and normalization, and the HOTRG
  coarse-graining step. The host runs these around the two engines.

**Sizes the default can hold.** DB = 12 takes contractions and SVDs of
matrices up to 12 x 12. Smaller sizes run zero-padded. The iTEBD bond
dimensions studied (2 to 12) fit when the SVD is of a D_b x D_b matrix. A
spin-1/2 iTEBD step that decomposes a (2·D_b) x (2·D_b) matrix fits only up
to D_b = 6. HOTRG works on matrices of size about D_b^2, which fit only for
D_b = 2; D_b = 4, 6 and 8 would need DB = 16, 36 and 64. The arrays grow as
NB^3 tile multipliers (contraction) and (NB)^2 rotators (SVD).

## Verification

Each module has a self-checking testbench in `tb/`. Each one ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog. References are computed
independently, in double precision (`real`), from the same inputs:

| testbench | what it checks |
|---|---|
| `tb_quad_tile_sram` | reset, one-element writes against a shadow copy, hold |
| `tb_tile_mul` | 500 random products against a real-valued 2x2 product |
| `tb_contract_engine` | uneven shape (NI 2, NJ 3, NK 4, NL 2), every output element, latency NK + 1, busy, back-to-back runs |
| `tb_cordic` | atan2 in all quadrants, on the axes and at (0, 0); gain·length; cos/sin over [−π, π]; latency |
| `tb_jacobi_angle` | the returned rotations diagonalize random general, symmetric and diagonal blocks; angles within π/2; latency |
| `tb_jacobi_rotator` | M, U and V updates against real-valued rotations |
| `tb_svd_engine` | N = 6: convergence, off-diagonals ≤ tol, Λ = U^T M V, orthogonality of U and V, Frobenius norm, exact clock count, sweep-limit stop |
| `tb_workload_scaling` | one update (contraction, then SVD of its result) at every bond dimension D_b = 2, 4, …, 12, each on its own accelerator of that size; numbers checked as above, and the clock counts must grow linearly in D_b (table printed, see below) |
| `tb_tn_accel_top` | default size (DB = 12), all through the host port: contraction against the reference and its latency, SVD chained after the contraction, SVD of a symmetric host matrix, sweep-limit stop, exact clock counts, and a count of each mechanism |

Clock counts measured by `tb_workload_scaling` (random A and B in
[−0.5, 0.5], tol 2^-12):

| D_b | contraction | SVD sweeps | SVD clocks | clocks per sweep |
|---|---|---|---|---|
| 2 | 2 | 1 | 55 | 54 |
| 4 | 3 | 3 | 481 | 160 |
| 6 | 4 | 3 | 799 | 266 |
| 8 | 5 | 4 | 1489 | 372 |
| 10 | 6 | 4 | 1913 | 478 |
| 12 | 7 | 5 | 2921 | 584 |

Both operations grow linearly with D_b, apart from the sweep count, which
depends on the matrix and the tolerance. At a 100 MHz clock, the 12 x 12
SVD above takes 29 µs.

To run one with Verilator (5.x), from the directory that holds `rtl/` and
`tb/`:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
      rtl/tn_pkg.sv tb/tb_svd_engine.sv --top-module tb_svd_engine -Mdir obj -o sim
    ./obj/sim

Every testbench finishes in well under a second of simulation. The full-size
top-level test takes about a minute to compile, because of the 432 tile
multipliers.

To change the size, set `DB` on `tn_accel_top`, or `N` on `svd_engine`. Both
must be even. `NL` adds an unsplit index to the contraction. `ITER` trades
angle precision against step time (1 to 28). To change the number format,
edit `FX_W` and `FX_FRAC` in `tn_pkg` and regenerate the CORDIC constants:
atan(2^-i)·2^FX_FRAC, and 2^FX_FRAC / Π sqrt(1 + 2^-2i) for the rotation
start value.
