# Singular value decomposition with fast Givens rotations: a systolic array in SystemVerilog

This design computes the singular value decomposition A = U Σ Vᵀ of a real,
non-symmetric N×N matrix. It uses the two-sided Jacobi method: a grid of
processors applies plane rotations from the left and from the right until
the matrix is diagonal. The rotations are *fast rotations*. Their tangent is
restricted to a power of two, t = 2⁻ˡ. Finding a rotation therefore only
needs a few additions, comparisons and priority encoders. Applying one only
needs shifts and additions. The circuit has no multiplier, no divider, no
square root and no CORDIC.

The RTL follows the architecture of *"The Normalized Singular Value
Decomposition of Non-Symmetric Matrices Using Givens fast Rotations"*. It
builds:
- the four-step circuit that estimates both rotation angles straight from a
  2×2 block;
- the shift-and-add multiply and scale circuits;
- the single and double rotation circuits;
- the diagonal and off-diagonal processors;
- the 8×8 systolic array with its round-robin processing order.

Where this design departs from the paper, or fills a gap in it, the text
below says so.

## 1. The method in one page

### Jacobi on 2×2 blocks

Take a 2×2 block [a b; c d]. Two rotations R_θ and R_Θ make R_θᵀ [a b; c d] R_Θ
diagonal. With θ = α − β and Θ = α + β, the two intermediate angles are:

    tan(2α)-like ratio : (c + b) / (d − a)      ("alpha", numerator N1, denominator D1)
    tan(2β)-like ratio : (c − b) / (d + a)      ("beta",  numerator N2, denominator D2)

In an N×N matrix, the rows and columns are grouped in pairs. Each pair of pairs
gives one 2×2 block on the diagonal. The processor that holds that block
computes θ and Θ. Every other block in the same block row is rotated by θ from
the left. Every block in the same block column is rotated by Θ from the right.
U and V collect the same rotations.

After every step, rows and columns are re-paired so that every pair of indices
meets once per *sweep* of N−1 steps. A few sweeps drive the off-diagonal part
towards zero.

### Fast rotations

A fast rotation has tangent t = 2⁻ˡ, with l ≥ 2, or t = 0 when l = 0 (no
rotation). Its cosine and sine are

    c = (1 − t²)/(1 + t²),   s = ±2t/(1 + t²).

The unscaled parts are cheap: multiplying by 1 − t² is x − (x >> 2l), and
multiplying by 2t is x >> (l−1). The common factor 1/(1 + t²) is applied
afterwards by a separate *scale* circuit. Because that factor is the same for
every element, the scaled result is an exact orthogonal rotation by the
rounded angle. Only the choice of angle is approximate, never the
orthogonality.

### Direct estimate of l (four steps)

The ideal angle would need a division and an arctangent. The circuit instead
compares exponents. The four steps are:

1. **Step 1** (`rot_step1`) forms c+b, d−a, c−b and d+a, and records their
   sign bits. It then takes the magnitudes:
   - N1 = |c+b| and D1 = 2|d−a|;
   - N2 = |c−b| and D2 = 2|d+a|.

   A priority encoder gives the position of the leading one of each. K = e(D) − e(N) is a
   first guess of log₂(D/N). The encoders' valid outputs flag N1 = 0 and
   N2 = 0.
2. **Step 2** (`rot_step2`, once per angle) refines the guess by comparing 1.5·D
   with 2ᴷ·N and 2ᴷ⁺¹·N:

       l_temp = K+1  if 1.5·D > 2^(K+1)·N
                K−1  if 1.5·D < 2^K·N
                K    otherwise
       l = max(l_temp + 1, 2)

   It also outputs a flag B = I0·¬I1 + I2, formed from the three comparator
   outputs (I0: D < 2ᴷ·N, I1: 1.5·D < 2ᴷ·N, I2: 1.5·D > 2ᴷ⁺¹·N). Step 3 uses
   it when the two exponents differ by one.
3. **Step 3** (`rot_step3`) turns l_α and l_β into l_θ and l_Θ by a small case
   table. The table looks at N1 = 0, N2 = 0 and the difference l_β − l_α:

   | condition | (l_Θ, l_θ) |
   |---|---|
   | N1 = 0 and N2 = 0 | (0, 0), no rotation (this design's addition) |
   | N2 = 0 | (l_α, l_α) |
   | N1 = 0 | (l_β, l_β) |
   | l_β − l_α = −1 | (l_β − B·b, l_α) |
   | l_β − l_α = +1 | (l_α − B·b, l_β) |
   | l_β − l_α = 0 | (l_β − 1, 0) |
   | otherwise | (min, min) |

   When α and β have opposite signs, the two results are exchanged.

   The reasoning: when one angle dominates, both rotations are about that
   angle. When the two are close, one rotation gets about twice the angle and
   the other gets none.
4. **Step 4** (`rot_step4`) picks the signs. S is the sign of the dominant
   intermediate angle:
   - α when l_β ≥ l_α, or when N2 = 0;
   - β otherwise.

   Then:

       N2 = 0 : S_Θ = S,  S_θ = S
       N1 = 0 : S_Θ = S,  S_θ = −S
       else   : S_Θ = S,  S_θ = S · sign(l_β − l_α)

Finally, each rotation is used in one of two forms, chosen by the sign of c+b:
- plain [c s; −s c] when c+b < 0;
- swapped [s c; c −s] otherwise.

The swapped form is a rotation combined with a row or column exchange. It
handles angles near 90° without a large rotation. It also orders the
diagonal, which is why the paper calls the result *normalised*.

## 2. Departures from the paper

The printed algorithm and figures disagree in a few places. Each choice
below was settled with a bit-true model of the whole iteration, and the
alternative was tried.

- **Sign order in step 4.** The printed default case reads
  (S_Θ, S_θ) = (S·sign(l_β−l_α), S). With Θ = α+β and θ = α−β, this makes the
  iteration diverge. The RTL exchanges the two: (S, S·sign(l_β−l_α)).
- **Form selection.** The algorithm listing selects the form by the sign of
  d−a (S_D1). The hardware description instead sets the multiplexers of the
  multiply blocks from S_N1, the sign of c+b, and sends S_N1 along the rows
  and columns. The RTL follows the hardware description. Selecting by S_D1
  stalls the convergence of the full array.
- **Diagonal blocks.** The case table has no entry for N1 = N2 = 0. Applying a
  small rotation there changes U and V but, after rounding, not Σ, so the
  factors drift apart. The RTL applies no rotation in that case.
- **Misprints.** These were corrected as follows:
  - The algorithm listing defines N2 and D2 with the same sums as N1 and D1.
    The step-1 figure uses c−b and d+a, and the RTL follows the figure.
  - The second comparison of step 2 compares D2 against N1; the RTL uses N2.
  - The step-2 figure draws the 1.5·D adder as D + (D<<1), which is 3·D; the
    RTL uses D + (D>>1).
- **Doubling of D.** The step-1 figure shows the ×2 after the priority
  encoder. The RTL doubles the value, as the algorithm defines D1 = 2|d−a|.
- **Scale.** The scale block is always present, although the paper leaves it
  optional.
- **Saturation.** Results are saturated to the storage width. The paper does
  not say how overflow is handled.

## 3. Applying a rotation without multipliers

`fr_multiply` computes one term of a rotation, A·cos′ or A·sin′. It uses one
barrel shifter, a conditional one's complement (the `comp_q` input) and one
adder whose carry-in completes the two's complement:

| case | operation |
|---|---|
| cosine, l ≠ 0 | A + ¬(A >> 2l) + 1 = A − (A >> 2l) |
| sine, l ≠ 0 | ±(A >> (l−1)) |
| l = 0, cosine (c = 1) | A + 0 (the shifted operand is zeroed) |
| l = 0, sine (s = 0) | A + ¬A + 1 = 0 |

The `sin_q` and `comp_q` controls of each multiplier are decoded from the
rotation descriptor. The decoding is done by `rot_coef` and `comp_of` in
`nsvd_pkg`.

`fr_scale` multiplies by λ = 1/(1 + 2⁻²ˡ) using the repeating bit pattern of λ.
It never uses a general multiplier. The steps are:
- First, z0 = g − (g >> 2l).
- Then up to three accumulate stages of the form z = z + (z >> δ) add the
  remaining terms. The shifts δ are selected by l:

| l | stage 1 | stage 2 | stage 3 |
|---|---|---|---|
| 1 | z0 >> 4 | z1 >> 8 | z2 >> 16 |
| 2 | – | z1 >> 8 | z2 >> 16 |
| 3 | – | z1 >> 12 | z0 >> 24 |
| 4 | – | – | z2 >> 16 |
| 5 | – | z1 >> 20 | – |
| 6 | – | – | z0 >> 24 |
| 7 | – | – | z2 >> 28 |
| 8 … 15 | – | – | – |

For l ≥ 16, λ rounds to 1 at 32 bits, so the block is bypassed. It is also
bypassed for l = 0. The table was checked against 1/(1+2⁻²ˡ) for every l. The
error stays within a few LSB at 32 bits.

`givens_single` uses 8 multipliers, 4 adders and 4 scale blocks to compute
X·R or Rᵀ·X. Left multiplication reuses the same datapath on the transposed
block. `givens_double` chains two of them to compute R_θᵀ·X·R_Θ.

## 4. Processors and the array

Each processor holds three 2×2 blocks: one of Σ, one of Uᵀ and one of Vᵀ.
`apply_rot` updates them as follows:

    Σ  ← R_θᵀ Σ R_Θ      (double rotation)
    Uᵀ ← R_θᵀ Uᵀ         (single rotation)
    Vᵀ ← R_Θᵀ Vᵀ         (single rotation)

This keeps A = U Σ Vᵀ invariant. U and V are stored transposed so that all
three updates act on rows, and the row exchange below moves them together.

- The **diagonal processor** (`dp`) adds the rotation calculation
  (`rot_calc` = steps 1–4 plus the form select). It drives θ along its row
  and Θ along its column.
- The **off-diagonal processor** (`ndp`) only applies the rotations it
  receives.

`svd_array` instantiates (N/2)×(N/2) processors: 4×4 for the default N = 8.
Each processor owns rows 2i, 2i+1 and columns 2j, 2j+1. One rotation step
happens per clock cycle: the rotation calculation and all rotation
applications are combinational between the Σ/U/V registers.

**Processing order.** The pairs met in successive steps are the round-robin
order below (1-based indices, N = 8):

    (1,2)(3,4)(5,6)(7,8)
    (1,4)(2,6)(3,8)(5,7)
    (1,6)(4,8)(2,7)(3,5)
    (1,8)(6,7)(4,5)(2,3)
    (1,7)(8,5)(6,3)(4,2)
    (1,5)(7,3)(8,2)(6,4)
    (1,3)(5,2)(7,4)(8,6)

The array realises this with a fixed permutation applied after every step. It
never re-routes data to processors. Number the slots 0…N−1:
- slot 0 stays put;
- the other slots move one place along the ring
  1 → 2 → 4 → … → N−2 → N−1 → N−3 → … → 3 → 1.

The permutation is applied to the rows and columns of Σ and to the rows of
Uᵀ and Vᵀ. After N−1 steps every pair has met once and the natural order is
back, so the outputs need no reordering. The function `src_slot` in
`svd_array.sv` gives, for each slot, the slot its new content comes from.

**Number formats inside.** The input elements are 16-bit two's complement.
Inside the array, Σ, Uᵀ and Vᵀ are stored as 32-bit numbers:
- Σ holds A·2¹². This leaves four bits of headroom for the growth of the
  largest singular value, and twelve fraction bits.
- U and V hold 1.0 as 2³⁰.

The fraction bits in Σ matter. With integer Σ, small late rotations round
away in Σ but not in U and V, and the reconstruction error grows with every
sweep. The paper only says that the internal width "changes". The 32-bit
width matches its scaling circuit and its accuracy study.

## 5. Interface and timing (`svd_array`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `start` | in | 1 | while idle, loads `a_in` and begins a decomposition |
| `a_in` | in | 16 × [N][N] | input matrix, signed |
| `busy` | out | 1 | from the start cycle until `done` |
| `done` | out | 1 | one-cycle pulse: results are valid |
| `sigma_out` | out | 32 × [N][N] | Σ, scaled by 2¹² (diagonal = singular values, with sign) |
| `u_out`, `v_out` | out | 32 × [N][N] | U and V, with 1.0 = 2³⁰ |

The cycle after `start`, the array runs SWEEPS·(N−1) rotation steps, one per
cycle, then pulses `done`. With the defaults (N = 8, SWEEPS = 2) that is 14
rotation cycles: `done` comes 15 cycles after the start cycle. The results
stay on the outputs until the next `start`.

The default of two sweeps comes from the throughput the paper reports at
125 MHz. 8.93 million matrices per second is exactly 14 cycles per matrix,
i.e. two sweeps of seven steps.

Parameters of the top:
- `N`: even, default 8;
- `DW`: input width, default 16;
- `IW`: storage width, default 32;
- `SWEEPS`: default 2.

`svd_ctrl` is the sequencer: an idle/run/done state machine with step and
sweep counters. It contains two assertions: load and run never overlap, and
the last step is always followed by `done`.

## 6. How well it works

The full-size testbench, `tb_svd_array`, uses the defaults. It decomposes:
- random 8×8 matrices at two amplitudes;
- a diagonal matrix;
- a symmetric matrix;
- a matrix with antisymmetric 2×2 diagonal blocks (this forces the N1 = 0
  path).

Results:
- After the two default sweeps:
  - U Σ Vᵀ reproduces A to better than 0.05 % relative error;
  - U and V are orthogonal to better than 10⁻⁴;
  - the off-diagonal norm of Σ has dropped by 54–69 %.
- With 8 sweeps (checked in `tb_svd_workloads`), the off-diagonal norm falls
  below 10 % of its starting value; over the random matrices tried it ended
  between 0.25 % and 8 %, typically 1–4 %.

The fast rotations lose the quadratic convergence of exact Jacobi. Two
sweeps are what the reported throughput implies, but they do not fully
diagonalise a random matrix. Use more sweeps (`SWEEPS`) where accuracy
matters more than throughput.

The testbench counts every mechanism of the design and fails if one never
occurs:
- plain and swapped rotation forms;
- l = 0 (no rotation);
- the N1 = 0 and N2 = 0 paths;
- the three exponent-difference cases of step 3;
- the wrap-around of the processing order.

It also checks the 15-cycle latency.

Each block has its own testbench, which compares against values computed
independently in the testbench:

| block | testbench checks |
|---|---|
| `rot_step1` | integer reference: sums, signs, magnitudes, floor-log₂ exponent differences |
| `rot_step2` | the case statement evaluated in real arithmetic; every branch covered |
| `rot_step3` | the case table, exhaustive over l_α, l_β ≤ 20 and all flags |
| `rot_step4` | sign rules with ±1 arithmetic, all 128 inputs |
| `rot_calc` | field checks; repeated 2×2 rotation converges below 1 % off-diagonal |
| `fr_multiply`, `fr_scale` | real-valued products, ±1 LSB / ±5 LSB (32-bit) |
| `givens_single`, `givens_double` | real 2×2 matrix products, ±4 / ±8 LSB |
| `apply_rot`, `ndp` | real-valued update, clamped, saturation covered |
| `dp` | per-step update at 32 bits; 2×2 convergence; U Σ Vᵀ = A |
| `svd_ctrl` | step/sweep sequence, `done` pulse, busy, start ignored while busy |

## 7. Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -y rtl -y tb \
        rtl/nsvd_pkg.sv tb/tb_svd_array.sv --top-module tb_svd_array -o sim
    ./obj_dir/sim

Every testbench ends by printing `TB_RESULT checks=<n> failures=<m>`. The
shared real-valued rotation reference is `tb/rot_ref.svh`, and the shared
processor-update check is `tb/apply_check.svh`. Both are included by path
relative to the project root.

## 8. Limits and what is not built

- **Paper sizes.** The paper reports three sizes, printed as 2×2, 4×4 and
  8×8. Their cycle counts at 125 MHz are 3, 14 and 60. These match real
  4×4, 8×8 and 16×16 matrices: 1, 2 and 4 sweeps of 3, 7 and 15 steps. The
  printed sizes therefore appear to count complex elements; this reading is
  inferred, not stated. The default array handles the 8×8 real case, the
  architecture figure's size, directly. A 4×4 runs with `N=4, SWEEPS=1`, or
  zero-padded in the default array. A 16×16 needs `N=16, SWEEPS=4`, an 8×8
  grid of processors; that is not the default. `tb_svd_workloads` runs all of
  these and checks the cycle counts (3, 14 and 60), reconstruction and
  orthogonality.
- **Early termination.** The paper mentions an early-termination method for
  power saving but does not describe it. It is not built.
- **Gate-level figures.** Some of the paper's small logic circuits (in steps
  2, 3 and 4) are written as the behaviour they implement, not gate for
  gate. The figures do not label their inputs clearly enough to copy them.
- **No pipelining.** A rotation step is one long combinational path: step 1,
  step 2, steps 3–4, then two rotations with scaling. That path sets the
  clock period. The paper likewise leaves pipelining out.
- **Saturation.** The 32-bit storage with four bits of headroom covers the
  growth of the largest singular value for any 16-bit input: at most N·2¹⁵
  for N = 8, i.e. 2¹⁸. Saturation is there only as a safeguard.
