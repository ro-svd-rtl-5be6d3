# RO-SVD: splitting ring-oscillator noise into a device fingerprint and a random seed

An FPGA that generates content, such as images from an AI accelerator, can also tag that content
with values only that chip could have produced. RO-SVD gets those values from one raw source: a
large matrix of comparison bits between ring oscillators (ROs). Each bit mixes two things:

* a **fixed pattern**, from where each oscillator is placed and how the silicon came out; it is
  the same every time the same chip is measured;
* **noise**, from thermal jitter and temperature; it changes from run to run.

Both parts are useful. The fixed pattern identifies the chip. The noise is a fresh random seed.
The design does not fight the noise with helper data or error correction. It separates the two
parts with a singular value decomposition (SVD). The largest singular component carries the
pattern shared by all rows of the matrix, which is the device's signature. What is left after
the leading components are removed is close to unstructured noise.

This RTL builds the whole chain in hardware and ends in two SHA-256 hashes:

* **H1 (authentication hash):** the rank-1 part of the matrix, binarised and hashed. It is meant
  to be stable for one device and to differ between devices.
* **H2 (stochastic hash):** the matrix minus its seven largest components, binarised and hashed.
  It is meant to change on every run.

A processor starts a run and reads both hashes through an AXI4-Lite register interface.

```
 ring oscillators ──► entropy_source ──► response_buffer ──► jacobi_svd ──► tsvd_reconstruct
 (ro_cell x 64)      M x N bit matrix    32-bit words        W = UΣ, V, σ²    rank-1 │ A − A_7
                     challenge_lfsr                                                  ▼      ▼
                                                               row_binarizer  row_binarizer
                                                                     ▼              ▼
                                                               bit_hasher    bit_hasher
                                                               (SHA-256) H1  (SHA-256) H2
                                   axi_lite_regs: CTRL, SEED, STATUS, SWEEPS, ROTS, σ1², H1, H2, irq
```

All sizes default to the evaluated configuration: a 1024 x 1024 response matrix, one singular
component for authentication and seven removed for the random part. Fixed point is Q15.16
throughout.

## 1. The oscillator matrix

### Oscillators (`ro_cell`)
On the FPGA, each oscillator is a loop of four LUTs. The first LUT gates the loop with an enable
and the other three are delay stages. Placement constraints keep the loop and allow it. A
combinational loop cannot be written as synthesizable RTL or simulated by a cycle-based
simulator, so `ro_cell` is a **behavioural model**. While `en` is high, its output toggles every
`STAGES*STAGE_PS + SKEW_PS ± JITTER_PS` picoseconds:

* `SKEW_PS` is the fixed, device-specific part of the delay.
* The jitter is drawn on every half period from a small per-instance linear congruential
  generator. It is the noise.

The top gives each of its 64 oscillators a skew in ±60 ps, from a hash of `DEVICE_SEED` and the
oscillator's index, and its own jitter seed. To simulate another chip, change `DEVICE_SEED`. The
defaults are:

* half period 4 × 400 ps, so a period of about 3.2 ns;
* jitter of ±3 ps per half period.

All of these values are modelling choices, not measured data.

### Compare units (`ro_compare_unit`, `ro_counter`, `challenge_lfsr`)
A compare unit holds two groups of `RO_PER_GROUP` = 2 oscillators. Challenge bits pick one
oscillator from each group. Both picked oscillators clock their own 16-bit counter (`ro_counter`)
while a window gate is open. The response bit is `count_A > count_B`.

* **Gate synchronisation.** The gate comes from the system clock. Each counter brings it into its
  own oscillator clock domain with two flops and restarts at 1 when the gate rises.
* **When counts are read.** They are read in the system domain only after the window has closed
  and a settle time has passed, when they are static.
* **When the mux switches.** Challenges change only while the gates are closed. This keeps glitches
  off the counter clocks.

The challenge bits come from a 32-bit Galois LFSR. Its polynomial is x^32+x^22+x^2+x+1 (taps
`0x80200003`). It is seeded from the SEED register, and an all-zero seed becomes 1. Sixteen units
at two 16-bit counters each give 512 counter flops. That is the register count the original
implementation reports for its entropy source.

### Filling the matrix (`entropy_source`)
`NUM_SRC` = 16 units measure in parallel. One measurement takes `WINDOW + SETTLE + 3` = 71 system
cycles, made up of:

* STEP: advance the LFSR;
* a 64-cycle window;
* a 4-cycle settle;
* sample;
* output.

It delivers 16 response bits with a valid/ready handshake. Unit u reads its two challenge bits
from LFSR bits 2u and 2u+1, taken modulo 32. The bits fill the M x N matrix in row-major order,
16 adjacent columns per measurement, so N must be a multiple of `NUM_SRC`.

A 1024 x 1024 matrix needs 65,536 measurements, which is 4.65 M cycles. `response_buffer` packs
two groups into each 32-bit word, earlier bits toward the MSB, and queues the words in an 8-deep
register FIFO. `jacobi_svd` consumes them as they arrive.

## 2. Fixed-point Jacobi SVD (`jacobi_svd`)

This is the largest and least obvious block. It uses the **one-sided (Hestenes) Jacobi method**.
Each matrix bit becomes the element 0.0 or 1.0. The block then repeatedly orthogonalises pairs
of columns of A by plane rotations, and applies the same rotations to V, which starts as the
identity. At convergence:

* A has become `W = A·V = U·Σ`, so column i is `σ_i·u_i`;
* V holds the right singular vectors;
* `‖w_i‖² = σ_i²`.

No separate U is stored and nothing is sorted.

### One column pair (i, j), i < j
1. **DOT**, M cycles, one row per cycle. It accumulates α = Σ a_ri², β = Σ a_rj² and
   γ = Σ a_ri·a_rj in 64-bit Q.16 accumulators. Each product is truncated by 16 bits before it
   is added.
2. **ANGLE**, 1 cycle. The pair is already orthogonal enough, and is skipped, unless both of these
   hold:
   * γ² > αβ·2^-20, meaning the columns' cosine is above 2^-10 (`TOL_SH` = 10);
   * |γ| > 4 LSB (`GMIN`).

   Otherwise a vectoring CORDIC computes θ = ½·atan2(2γ, β−α). Before the CORDIC, the vector is
   negated when β < α. This keeps the CORDIC in its right half-plane and θ within ±π/4.
3. **ROT_A**, M cycles. A rotation CORDIC replaces each row's pair:
   (a_ri, a_rj) ← (a_ri cos θ − a_rj sin θ, a_ri sin θ + a_rj cos θ).
4. **ROT_V**, N cycles. The same rotation is applied to rows of V.
5. **NEXT**, 1 cycle. Step to the next pair in cyclic order (0,1), (0,2), …, (N−2, N−1).

A skipped pair costs M + 2 cycles and a rotated pair costs 2M + N + 2. A sweep visits all
N(N−1)/2 pairs. The block stops after a sweep with no rotation, or after `MAX_SWEEPS` = 10 sweeps.
A final NORM pass (M·N cycles) stores σ_i² = ‖w_i‖² for every column.

### CORDIC details (`rosvd_pkg`)
* **Angle format.** Angles are Q2.29, and the arctangent table is round(atan(2^-i)·2^29).
* **Iterations.** `CORDIC_IT` = 20 iterations, unrolled, so each rotation is one combinational
  step per cycle. ROT_A and ROT_V each use one rotator.
* **Gain correction.** The rotation output is multiplied by 0.607252935 (652032874 in Q30) and
  rounded.
* **Guard bits.** The vectoring CORDIC works on the 64-bit accumulators, with two guard bits for
  the CORDIC growth of 1.65.

### Accuracy
The SVD was checked at two sizes.

* **At 8 x 8** (block test), within the tolerances given in the testbench:
  * W·Vᵀ reproduces A;
  * the columns of W and of V are orthogonal;
  * σ1² matches a power iteration, and Σσ² equals the number of ones in A.

  Random 0/1 matrices converge in 5–8 sweeps. A permutation matrix needs no rotation. The all-ones
  matrix keeps producing rounding-level rotations until the 10-sweep limit, but its result is
  still correct.
* **At 32 x 32** (full-pipeline test), against a floating-point one-sided Jacobi SVD of the same
  matrix, computed in the testbench:
  * σ1² matched the floating-point value to within 0.05%;
  * none of the authentication bits differed, and at most 5 of 1024 stochastic bits did.

  All runs used the full 10 sweeps. Fixed-point rounding keeps a few pairs just above the
  threshold, so this limit is what ends the loop at this size.

### Storage and time at the default size
The block keeps everything on chip:

| Array | Size |
|---|---|
| W | M·N × 32 bit |
| V | N·N × 32 bit |
| original bits | M·N × 1 bit |
| σ² | N × 64 bit |

At 1024 x 1024 that is 68.2 Mbit. That is far more block RAM than a Zynq-7020 class device has
(about 4.9 Mbit). The original implementation keeps its matrices in external DDR behind an AXI
master port. To build this design on such a device, replace these arrays with a memory interface.

One sweep at 1024 x 1024 has 523,776 pairs and takes 0.54 G cycles (all pairs skipped) to
1.61 G cycles (all pairs rotated). That is roughly 5–16 s per sweep at 100 MHz. This in-place,
one-pair-at-a-time schedule was chosen to be simple and obviously correct, not fast. A
parallel-pair (Brent–Luk) ordering, or several rotators per row, are the natural ways to speed
it up.

## 3. Splitting the spectrum (`tsvd_reconstruct`)

The reconstruction reads W, V, σ² and the original bits through combinational read ports of
`jacobi_svd`. It runs in two steps.

**SELECT.** `K_RAND` passes over the N values of σ² find the indices of the `K_RAND` = 7 largest
singular values, largest first. Ties go to the lowest index. This takes K_RAND·(N+1) cycles.

**MAC and EMIT.** For every element (r, c), in row-major order, K_RAND cycles accumulate
p_s = W[r][idx_s]·V[c][idx_s]. The block then emits two values:

* `auth = p_0`, the rank-`K_AUTH` (= 1) approximation σ1·u1·v1ᵀ;
* `rand = A[r][c] − Σ_{s<7} p_s`, the matrix with its seven leading components removed.

The stochastic matrix is computed as A − A_7, not as U·Σ_rest·Vᵀ. In exact arithmetic the two
are the same. This form needs 7 multiply-adds per element instead of N − 7. An element takes
K_RAND + 1 cycles when the consumer is ready. `sigma1_sq` (σ1², Q.16) is kept for the registers.

## 4. Binarisation and hashing

**`row_binarizer`** stores one row of N values while it sums them. It then emits one bit per
element, 1 when the element is ≥ the row average. The comparison is made without a division, as
`N·x ≥ Σ row`. While it emits, it does not accept input. This back-pressure regularly stalls
the reconstruction, which is expected behaviour.

* **Rank-1 matrix.** Binarising it row by row gives, in each row, the pattern of the principal
  right singular vector v1 (thresholded at its mean), or its complement. So H1 is in effect a
  hash of the binarised principal component vector.
* **Stochastic matrix.** Binarised the same way, and hashed into H2.

**`bit_hasher`** turns a bit stream of known length `MSG_BITS` (= M·N) into a SHA-256 digest. It
works as follows:

* It shifts bits into a 512-bit block; the first bit becomes the MSB of the first message byte.
* It hands each full block to `sha256_core`, which runs one round per cycle. `ready` returns
  65 cycles after `start`, so a new block can start every 66 cycles.
* It appends the standard padding by itself: a 1, zeros, and the 64-bit length.

A 1024 x 1024 matrix is 2049 blocks per hash. In the full design the hashers never stall the
binarisers: the next row takes N·8 cycles to reconstruct, which is longer than one compression.

## 5. Register interface and one run (`axi_lite_regs`, `ro_svd_top`)

AXI4-Lite slave, 8-bit byte addresses, 32-bit registers:

| Address | Name | Access | Content |
|---|---|---|---|
| 0x00 | CTRL | W | write 1 to bit 0: start a run (self-clearing) |
| 0x04 | STATUS | R | bit 0 busy, bit 1 done |
| 0x08 | SEED | R/W | challenge LFSR seed (byte strobes honoured) |
| 0x0C | SWEEPS | R | Jacobi sweeps used by the last run |
| 0x10 | ROTS | R | Jacobi rotations applied by the last run |
| 0x14 / 0x18 | SIG1_LO / SIG1_HI | R | σ1², 64-bit Q.16 |
| 0x20–0x3C | H1[0..7] | R | authentication hash, word 0 = digest bits 255:224 |
| 0x40–0x5C | H2[0..7] | R | stochastic hash, same order |

Unmapped addresses read 0, and BRESP/RRESP are always OKAY.

* **Write timing.** AWREADY and WREADY rise together, once both address and data are valid.
* **Read timing.** Read data follows one cycle after the address.

A run works as follows:

1. Write SEED, then CTRL = 1.
2. The core then does four things at once: it starts the entropy source, clears the buffer, puts
   the SVD into its load phase and initialises both hashers.
3. When the SVD is done, the reconstruction starts.
4. When both hashes are valid, STATUS.done is set and `irq` pulses for one cycle.

Busy is high from the start until done. A new start may be issued at any time, and it restarts
everything.

The top's other ports:

* `clk`, and `rst_n`, an asynchronous active-low reset;
* `irq`;
* the X1/X2 streams, `x1_valid`/`x1_bit`/`x1_last` and `x2_valid`/`x2_bit`/`x2_last`. They carry
  one bit per cycle while valid, in row-major order. The `*_last` signal marks the last bit of
  each row. The streams cannot be stalled from outside.

## 6. Where this design departs from the published one

* **Matrix storage.** Matrices are held on chip. The original moves them to and from DDR with
  DMA over an AXI HP master port; that path, the DDR and the ARM processor are not part of this
  RTL.
* **SVD arithmetic.** The SVD is fixed point, Q15.16 with CORDIC. The original uses a
  floating-point Jacobi SVD generated by high-level synthesis. The Jacobi method itself is the
  same.
* **Hash function.** SHA-256 is this design's choice. The original only says "a hash function".
* **Row average.** The threshold is the true average of the row's N elements. The published
  formula divides the row sum by the number of rows, which matters only for non-square matrices.
* **Stochastic matrix.** The published formula keeps "the k smallest" singular values. Its
  experiments remove the first seven. This design follows the experiments: it removes the 7
  largest and keeps all the rest.
* **Authentication matrix.** It is the full rank-1 matrix, binarised with the same row-average
  rule. The original says only that the principal component is "selected and binarised".
* **Registration and verification.** The original computes the reference H1 once, at
  registration, and compares later H1 values against it. This core computes H1 and H2 on every
  run; comparing and registering them is software.
* **Oscillators.** They are a behavioural model. The placement and routing constraints the
  original relies on have no RTL counterpart, and the skew and jitter values are invented.
* **Invented sizes.** None of the following is given: the number of units (16), ROs per group
  (2), counter width (16), window (64 cycles), LFSR polynomial, FIFO depth, sweep limit,
  thresholds, or the register map.
* **Out of scope.** The blockchain, the LSB watermark embedding and the AI accelerator. For the
  embedding stage, the binarised matrices X1 and X2 leave the core as bit streams on the
  `x1_*`/`x2_*` ports. These are the same bits, in the same order, that enter the hashers.

**What the model does and does not show.** In the full-pipeline test at 32 x 32, three runs were made:

* **Same seed repeated.** 26 of 1024 matrix bits changed through oscillator jitter. H1 stayed the
  same and H2 changed.
* **New seed.** Almost 400 matrix bits changed, and both hashes changed.

At other sizes and jitter settings a repeated run sometimes changed H1 too.

Whether H1 is stable enough to identify a chip depends on the real silicon, which a behavioural
oscillator model cannot settle.

## 7. Verification and simulation

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>`. The table gives the size each test was run at and what it
checks.

| Testbench | Size | Checks |
|---|---|---|
| `tb_ro_cell` | 4 stages, with and without skew/jitter | edge counts for a fixed time, jittered count within bounds, silent and low while disabled |
| `tb_ro_counter` | 16-bit | counts for 3 ns and 4 ns oscillators, restart on a new window, hold after it |
| `tb_ro_compare_unit` | 2 ROs per group | all four challenges select the right pair and give the right response |
| `tb_challenge_lfsr` | 32-bit and 8-bit | sequence against a reference, seed load, zero seed |
| `tb_entropy_source` | 4 units, 4 x 8 | matrix against the oscillator frequencies, 71-cycle measurement rate, back-pressure |
| `tb_response_buffer` | 16→32, depth 4 | every word and its bit order, stall while full, empty after reset and when drained |
| `tb_jacobi_svd` | 8 x 8 | random, all-ones and permutation matrices: W·Vᵀ = A, WᵀW diagonal, VᵀV = I, σ1² against power iteration, Σσ² = number of ones, load time |
| `tb_tsvd_reconstruct` | 4 x 8, K_RAND = 3 | both output values of every element against a reference built from the same W and V, one element per K_RAND+1 cycles, σ1² |
| `tb_row_binarizer` | N = 8 | every bit against a reference, row framing, fill/emit alternation |
| `tb_sha256_core` | FIPS vectors | digests, 66-cycle block rate |
| `tb_bit_hasher` | 24, 448 and 1500 bits | against a reference SHA-256, block count |
| `tb_axi_lite_regs` | — | every register, SEED byte strobes, start pulse, responses held until accepted |
| `tb_ro_svd_top` | 32 x 32, all else default | end-to-end, see below |

`tb_ro_svd_top` drives the AXI port like a processor, for two seeds and a repeat of the first.
It builds its own reference from data it records:

* the response matrix as it leaves the entropy source;
* a floating-point Jacobi SVD of that matrix;
* the reconstructions and binarisation computed from that SVD;
* a reference SHA-256.

It then requires:

* H1 and H2 read over AXI to equal the reference hashes of the exact bit streams;
* the `x1_*`/`x2_*` ports to carry exactly those streams;
* the bits to agree with the floating-point model to within 2% (authentication) and 5%
  (stochastic);
* σ1² to agree within 1%.

It also counts the mechanisms and fails if any did not occur:

* measurements;
* rotations and skipped pairs;
* binariser back-pressure;
* SHA-256 blocks;
* one interrupt per run.

It also checks that the hashers never stall.

**Largest simulated size.** The full design was simulated at **32 x 32**, with the other
parameters at their defaults, including 16 compare units. That test makes three complete runs
and takes about two minutes of wall-clock time in Verilator. The default 1024 x 1024 configuration compiles and
elaborates but was not simulated. Two things rule it out:

* the oscillator model alone needs about 2·10⁹ simulator events for the 46 ms of acquisition;
* each Jacobi sweep is 0.5–1.6·10⁹ clock cycles.

### Running a testbench with Verilator
From the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/rosvd_pkg.sv tb/tb_sha256_pkg.sv tb/tb_ro_svd_top.sv --top-module tb_ro_svd_top
./obj_dir/Vtb_ro_svd_top
```

Replace the top module name to run another testbench. The size of the end-to-end test is set by
`M` and `N` at the top of `tb_ro_svd_top.sv`. Note that the test's reference SVD is O(N³) per
sweep and that a larger matrix needs a longer watchdog. `ro_cell` uses delays and `wait`, so
`--timing` is required. It is not synthesizable, and a synthesis tool will see each oscillator as
a combinational loop. On the FPGA, replace it with the hand-placed LUT loop.

### Parameters worth changing
| Parameter | Where | Default | Meaning |
|---|---|---|---|
| `M`, `N` | top | 1024 | matrix size; N a multiple of `NUM_SRC` |
| `NUM_SRC` | top | 16 | parallel compare units (response bits per measurement) |
| `WINDOW`, `SETTLE` | top | 64, 4 | measurement window and settle time, system cycles |
| `K_AUTH`, `K_RAND` | top | 1, 7 | components in the authentication matrix / removed from the stochastic one |
| `MAX_SWEEPS` | top | 10 | Jacobi sweep limit |
| `CORDIC_IT`, `TOL_SH`, `GMIN` | `jacobi_svd` | 20, 10, 4 | CORDIC iterations, orthogonality threshold 2^-TOL_SH, minimum |γ| in LSB |
| `DEVICE_SEED`, `SKEW_RANGE`, `JITTER_PS`, `STAGE_PS` | top | 1, 60, 3, 400 | oscillator model: simulated chip, fixed skew range, jitter, stage delay (ps) |
