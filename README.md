# A multiplierless eight-point DCT from a parametrised Loeffler flow graph

The Loeffler algorithm computes the eight-point DCT-II with the fewest
multiplications possible, eleven. Its multiplications all sit in one stage and
all multiply by one of six irrational constants, sqrt(2)·cos(kπ/16) for
k = 1, 2, 3, 5, 6, 7. Replace those six constants by free parameters
α1…α6 and you get a whole family of transforms that share a single signal
flow graph. Limit each parameter to {0, ±1/2, ±1, ±2} and every member of the
family needs only additions, negations and one-bit shifts. The
Coelho–Cintra–Bayer et al. article "Low-Complexity Loeffler DCT Approximations
for Image and Video Coding" searched this family exhaustively. It kept six
Pareto-efficient parameter vectors, T1…T6, trading closeness to the DCT and
coding gain against adder and shift count, and mapped T1, T3, T5 and T6 onto
an FPGA.

This repository is synthesizable SystemVerilog for that flow graph. It has one
pipelined core whose parameter vector is chosen at elaboration. The default is
T1, the smallest design: 14 additions and no shifts. The other vectors are
constants in the package.

## The flow graph: T_α = P · M_α · A

The transform matrix factors into three stages. Each stage is one block of
RTL.

**Stage 1: butterfly A** (`loeffler_stage1`). Eight adders, the same for
every α:

    a0 = x0 + x7    a1 = x1 + x6    a2 = x2 + x5    a3 = x3 + x4
    a4 = x3 - x4    a5 = x2 - x5    a6 = x1 - x6    a7 = x0 - x7

**Stage 2: M_α = blockdiag(E_α, O_α).** The sums and the differences are
processed separately.

*Even part* (`loeffler_even`). A second butterfly produces X0 and X4. A
two-parameter rotation produces X2 and X6:

    t0 = a0 + a3   t1 = a1 + a2   t2 = a1 - a2   t3 = a0 - a3
    m0 = t0 + t1                     -> X0
    m1 = t0 - t1                     -> X4
    m2 = α2·t3 + α5·t2               -> X2
    m3 = α5·t3 - α2·t2               -> X6

*Block A, the odd part* (`loeffler_odd`). It computes the 4×4 product
O_α·b with b = (a4, a5, a6, a7):

    m4 = -α1·b0 + α3·b1 - α4·b2 + α6·b3    -> X7
    m5 = -α4·b0 - α1·b1 - α6·b2 + α3·b3    -> X3
    m6 =  α3·b0 + α6·b1 - α1·b2 + α4·b3    -> X5
    m7 =  α6·b0 + α4·b1 + α3·b2 + α1·b3    -> X1

Every difference fans out to all four outputs, each time through a
shift/negate (`alpha_scale`). This is the fully connected block of the flow
graph. Where a parameter is zero, the term is a constant. Synthesis removes it
together with its adder. That is how the cost formula of the family arises:
8 + 2·max(1, n_even) + 4·max(1, n_odd) additions, where n_even counts the
nonzero values among α2, α5 and n_odd counts the nonzero values among
α1, α3, α4, α6. At the default T1 only α1 is nonzero. Block A then degenerates
to three negations and a wire, and the whole transform uses 14 additions.

**Stage 3: permutation P.** This is wiring only. It puts m0…m7 into natural
coefficient order: X0=m0, X1=m7, X2=m2, X3=m5, X4=m1, X5=m6, X6=m3, X7=m4.

One sanity check on the factorisation: with every α = 1 the result is the
signed DCT, a ±1 matrix. With α = sqrt(2)·[c1 c2 c3 c5 c6 c7] it is the
exact DCT scaled by 2·sqrt(2).

## Choosing the transform

`loeffler_pkg` defines `alpha_t`, a 3-bit enum over {0, +1/2, −1/2, +1, −1,
+2, −2}. It also defines `alpha_vec_t`, a packed struct of the six values.
Pass a vector as the `ALPHA` parameter:

| constant   | α1 α2 α3 α4 α5 α6     | additions | shifts | orthonormal after scaling |
|------------|-----------------------|-----------|--------|---------------------------|
| `ALPHA_T1` | 1 1 0 0 0 0           | 14        | 0      | yes                       |
| `ALPHA_T2` | 1 1 0 0 ½ 0           | 16        | 2      | yes                       |
| `ALPHA_T3` | 1 1 1 0 0 0           | 18        | 0      | no (near-orthogonal)      |
| `ALPHA_T4` | 1 1 1 1 ½ 0           | 24        | 2      | yes                       |
| `ALPHA_T5` | 1 2 0 0 1 0           | 16        | 2      | yes                       |
| `ALPHA_T6` | 1 2 1 1 1 0           | 24        | 2      | yes                       |

T5 yields the same normalised transform as T2, and T6 the same as T4. The
difference is that T5 and T6 double two even rows with a left shift instead
of halving with a right shift. Those two, together with T1 and T3, are the
versions that were built in hardware in the original work. Two further
constants are `ALPHA_SDCT` (all ones, the signed DCT) and `ALPHA_EX2`, a
half/one example of the parametrisation.

The core outputs the low-complexity matrix T_α itself. The orthonormal
approximation is diag(T·Tᵀ)^(−1/2)·T, and its diagonal factors are irrational,
for example 1/sqrt(8) on X0 and X4. A codec folds them into its quantiser, so
they are not computed here.

## Word length and rounding

The published work gives no word lengths. This design makes three choices:

* **Inputs** are signed, `IN_W` = 8 bits by default.
* **One internal width.** Every internal node and output is signed with
  `OUT_W = IN_W + 5` bits. No row of T_α has an L1 norm above 16, because it
  has eight entries of magnitude at most 2. So the largest output is
  16·2^(IN_W−1), and the fifth bit keeps +16·(−2^(IN_W−1)) representable.
  Nothing can overflow, and the testbenches drive full-scale corner vectors to
  confirm it.
* **Multiplying by ½** is an arithmetic right shift, i.e. rounding toward
  minus infinity. A factor of −½ negates after the shift. Only T2, T4 and the
  examples use ½. T1, T3, T5 and T6 are exact integer transforms.

## Pipeline and interface (`loeffler_dct8`)

| port        | dir | width         | meaning                                  |
|-------------|-----|---------------|------------------------------------------|
| `clk`       | in  | 1             | clock                                    |
| `rst_n`     | in  | 1             | synchronous active-low reset             |
| `in_valid`  | in  | 1             | `x` carries a vector this cycle          |
| `x[0:7]`    | in  | 8 × `IN_W`    | signed samples x0…x7                     |
| `out_valid` | out | 1             | `X` carries a result                     |
| `X[0:7]`    | out | 8 × `OUT_W`   | signed coefficients X0…X7, natural order |

There are three register stages: the input, the butterfly output and the
final output. A vector sampled at clock edge n is in `X` after edge n+2, so a
downstream register takes it at edge n+3. Throughput is one vector per clock,
and there is no back-pressure. Reset clears only the valid bits, so vectors in
flight are dropped. Data registers load only when their stage's valid bit is
set. The published work reports flip-flop counts and clock rates (for T1: 368
flip-flops, 359 MHz on a Virtex-6), so its prototype was registered too. It
does not say where the registers were, so the pipeline here is this design's
own.

## Verification

The testbenches are self-checking. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

* `tb_loeffler_stage1`, `tb_loeffler_even`, `tb_loeffler_odd` test the
  combinational blocks. The even and odd tests cover six parameter vectors,
  including negative values of every magnitude. The expected values come from
  `tb/loeffler_ref_pkg.sv`, which builds A, M_α and P as integer tables and
  multiplies them out. It never uses the hardware's flow graph. It stores 2·α,
  so everything stays in integers. Results with ½ may differ from the exact
  value by the rounding of each halved product.
* `tb_loeffler_dct8` is the end-to-end test. Nine cores (T1…T6, the signed
  DCT, the half/one example, a vector with a negative value of every magnitude) share one stream of
  20,000 cycles. The stream has random gaps in `in_valid`, back-to-back
  vectors, full-scale inputs and a reset while data is in flight. The test
  checks every coefficient and that `out_valid` comes three edges after
  `in_valid`. It counts each of these mechanisms and fails if one never
  occurred. It first checks the reference model against the two example
  matrices printed with the parametrisation.
* `tb_loeffler_dct8_full` runs the core at its defaults (T1, 8-bit) on
  100,000 random vectors back to back. That is the size of the original FPGA
  co-simulation. The test checks all coefficients, the latency, and that the
  output stream has no gaps.
* `tb_loeffler_metrics` measures each efficient core's matrix from its eight
  impulse responses. From the measured matrix it recomputes the article's
  figures of merit: total error energy, MSE against the DCT for a Markov-1
  source with ρ = 0.95, coding gain and transform efficiency. It compares them
  with the published values, and checks T·Tᵀ against its closed form.

Run any of them with plain Verilator, for example:

    verilator --binary --timing -Wno-fatal -y rtl -y tb \
        rtl/loeffler_pkg.sv tb/loeffler_ref_pkg.sv tb/tb_loeffler_dct8.sv \
        --top-module tb_loeffler_dct8
    ./obj_dir/Vtb_loeffler_dct8

Leave out `tb/loeffler_ref_pkg.sv` for `tb_loeffler_metrics`, which does not
use it. All four runs finish in well under a second.

### How far the numbers agree

The measured matrices give these figures (error energy, MSE, coding gain in
dB, efficiency in %):

| transform | measured                     | published                   |
|-----------|------------------------------|-----------------------------|
| T1        | 8.659, 0.0594, 7.333, 80.90  | 8.66, 0.059, 7.33, 80.90    |
| T2, T5    | 7.734, 0.0556, 7.540, 81.99  | 7.73, 0.056, 7.54, 81.99    |
| T4, T6    | 0.870, 0.0061, 8.390, 88.70  | 0.87, 0.006, 8.39, 88.70    |
| T3        | 3.316, 0.0208, 7.81*, 83.08  | 1.44, 0.007, 8.30, 89.77    |

(*) T3 is not orthogonal, and this figure uses the orthonormal form of the
coding gain.

Five of the six transforms agree to every printed digit. T3 does not: no
parameter vector in {0, ±½, ±1, ±2}⁶ gives an error energy of 1.44 with this
normalisation. The published T3 row most likely describes a different
matrix. A smaller slip of the same kind: the two example vectors of the
parametrisation are printed with seven entries for six parameters. The
example matrices printed with them fix the intended values, [1 1 1 1 1 1] and
½·[1 2 1 1 1 2], and those are what `ALPHA_SDCT` and `ALPHA_EX2` hold. For T3 the testbench therefore checks only the structure: T·Tᵀ has
the predicted off-diagonal terms ±2d with d = −1, the deviation from
diagonality is 0.125, and the near-orthogonality criterion holds.

## Departures and limits

* **Design choices.** Word length, pipeline placement, the valid/reset
  handshake and the rounding of ½ were all chosen here. The stages, the
  parameter set and the permutation follow the published factorisation
  exactly.
* **Parameter fixed at elaboration.** A single flow graph for every member of
  the family suggests a transform that can be switched at run time. That is
  not built: `ALPHA` is fixed when the design is elaborated.
* **Eight-point, one-dimensional only.** The article also uses 16- and
  32-point versions inside an HEVC encoder. They are built recursively after
  Jridi et al., and the article gives only their adder counts (2A+16 and
  4A+64), so they are not included. Nor are a 2-D row/column wrapper with a
  transpose buffer, the inverse transform or the scaling to an orthonormal
  matrix.
* **Image and video use.** To code images or H.264 residuals, the core must
  sit inside a 2-D transform. Its second pass needs `IN_W` of 13 (after an
  8-bit first pass) or 14 (after a 9-bit residual first pass). The parameter
  allows that, but the 2-D wrapper is not provided.

## Files

| file                        | content                                               |
|-----------------------------|-------------------------------------------------------|
| `rtl/loeffler_pkg.sv`       | `alpha_t`, `alpha_vec_t`, T1…T6 and example vectors, latency and growth constants |
| `rtl/alpha_scale.sv`        | multiply by one parameter: shift, negate or zero      |
| `rtl/loeffler_stage1.sv`    | stage 1 butterfly A                                   |
| `rtl/loeffler_even.sv`      | even part E_α                                         |
| `rtl/loeffler_odd.sv`       | Block A, odd part O_α                                 |
| `rtl/loeffler_dct8.sv`      | top: pipelined core with permutation P                |
| `tb/loeffler_ref_pkg.sv`    | matrix reference model for the testbenches            |
| `tb/tb_*.sv`                | the testbenches described above                       |
