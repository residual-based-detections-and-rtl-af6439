# Residual-based MMSE detector for the massive-MIMO uplink

A base station with N antennas receives M single-antenna users at once,
y = H s + n. The linear MMSE estimate of the users' symbols is

    s_hat = A^-1 y_E,   A = H^H H + sigma2 * I   (M x M, Hermitian positive definite)
                        y_E = H^H y              (matched-filter output)

Inverting A costs O(M^3). This design never inverts it. It solves A s = y_E
with a few iterations of a *residual-based* Krylov method, one that makes the
residual norm ||y_E - A s|| smaller at every step:

* **MINRES** (minimal residual): one search direction per step, the residual
  itself. It is the cheapest, but it needs more iterations.
* **CR** (conjugate residual): residuals and search directions are kept
  A-conjugate. It is the symmetric specialisation of GMRES and reaches the
  exact solution after at most M steps. Even 3 or 4 steps come very close.

Both algorithms are built from the same two hardware primitives. The
detector has one set of them and runs either algorithm, chosen frame by
frame:

* an **iterative module**, a vector register with a multiply-add per
  element, `y = x + a*b`;
* a **coefficient module**, two Hermitian inner products and one divider,
  `c = (m^H n) / (p^H q)`.

Apart from these it needs only a matrix-vector multiplier (for `A r`) and two
delay registers.

The default configuration is N = 128 antennas, M = 16 users and up to 4
iterations.

## Algorithms as executed

Both start from s_0 = 0. Here `k` is the iteration count of the run
(`n_iter`, 1..ITER).

**CR**

    r = y_E ; p = y_E ; s = 0
    m = A r ; e = m
    repeat k times:
        alpha = (r^H m) / (e^H e)
        s = s + alpha p ;  r = r - alpha e        (r_old = r, m_old = m saved first)
        -- stop here on the last pass --
        m = A r
        beta  = (r^H m) / (r_old^H m_old)
        p = r + beta p ;   e = m + beta e

**MINRES**

    s = 0
    repeat k times:
        r = y_E - A s
        m = A r
        alpha = (r^H m) / (m^H m)
        s = s + alpha r

For both, `k` counts the updates of s. (In the usual statement of MINRES,
"for k = 0..K" gives K+1 updates. Here the count is the same for both
algorithms.) On the last CR pass the steps after the s update are skipped,
because they only prepare an iteration that never comes.

## How the steps map onto the hardware

`rbd_unit` holds four iterative modules (r, e, p, s), two coefficient modules
(alpha, beta), one multiplier `A*v` and the delay registers r_old and m_old.
Every step above is a single operation of one of these modules:

| step                     | module             | operands                                   | cycles |
|--------------------------|--------------------|--------------------------------------------|--------|
| r = y_E, p = y_E, s = 0  | r, p, s modules    | init (`y <= x`)                            | 1      |
| m = A r                  | matvec_mul         | v = r                                      | M + 2  |
| e = m (CR start)         | e module           | init, in the multiplier's last cycle       | 0      |
| alpha (CR)               | alpha coefficient  | m=r, n=m, p=e, q=e                         | 3      |
| alpha (MINRES)           | alpha coefficient  | m=r, n=m, p=m, q=m                         | 3      |
| s += alpha p, r -= alpha e | s, r modules     | a = alpha (all lanes), b = p or e          | 1      |
| beta                     | beta coefficient   | m=r, n=m, p=r_old, q=m_old                 | 3      |
| p = r + beta p, e = m + beta e | p, e modules | x = r or m, a = beta, b = p or e           | 1      |
| r = y_E - A s (MINRES)   | r module           | x = y_E then r, a = column j of A, b = s_j | M      |

The iterative module has a separate `a` and `b` input for each lane. The same
module therefore also computes a matrix-vector product, one column per cycle.
MINRES uses this to form its residual `y_E - A s` in the r module itself, with
the subtract operation.

A run therefore takes these numbers of cycles, counting from the cycle with
`start` to the cycle with `done`, both included:

    CR     : M + 5 + 4k + (k-1)(M+6)         M=16, k=4:  103 cycles
    MINRES : 3 + k(2M+6)                     M=16, k=4:  155 cycles

The testbenches check these cycle counts.

## The preprocessing: Gram matrix on a triangular systolic array

`gram_matrix` computes A from a stream of channel rows h = H(n,:), one per
cycle. Because A is Hermitian, only the lower triangle is computed. It uses
M(M+1)/2 processing elements. PE(i,j), with i >= j, holds one complex
accumulator and adds conj(h_i)*h_j for every row.

The operands travel through the array instead of being broadcast:

* conj(h_i) enters row i at the left edge, delayed by i cycles. It moves one
  PE to the right per cycle.
* h_j enters column j at the diagonal PE(j,j), delayed by 2j cycles. It moves
  one PE down per cycle.

Both operands reach PE(i,j) i+j cycles after the row entered the array. A
valid bit travels with the row operand, so gaps in the input stream are
allowed.

At start the diagonal accumulators are loaded with sigma2 and the others are
cleared. This gives the `+ sigma2*I` term at no extra cost.

The upper triangle is produced as conj(A(j,i)). Because products round toward
minus infinity, this is not bit-identical to computing conj(h_i)*h_j for
i < j. The reference model used in the testbenches mirrors the triangle in
the same way.

`done` rises after the 2M-th clock edge, counted from the edge that samples
the N-th row. The array then holds A until the next `start`.

`matched_filter` reads the same stream (row plus y(n)). It accumulates
conj(h_i)*y(n) in M lanes and finishes one cycle after the N-th row.

## Top level: `rbd_detector`

```
  h_row, y_n, in_valid ──┬──> gram_matrix ──── A ───┐
                         └──> matched_filter ─ y_E ─┴──> rbd_unit ──> s_hat
  start, alg, n_iter, sigma2 (sampled at start)
```

| port        | dir | meaning |
|-------------|-----|---------|
| `start`     | in  | begin a frame, accepted only while `busy` is low; samples `alg`, `n_iter` and `sigma2` |
| `alg`       | in  | `ALG_MINRES` or `ALG_CR` |
| `n_iter`    | in  | iterations, 1..ITER; 0 or a larger value means ITER |
| `sigma2`    | in  | noise variance (real, fixed point) |
| `in_valid`, `h_row[M]`, `y_n` | in | one antenna per cycle: H(n,:) and y(n); exactly N rows are used |
| `s_hat[M]`  | out | the estimate, valid when `done` pulses, held until the next result |
| `busy`, `done` | out | frame in progress; one-cycle completion pulse |

The algorithm unit starts by itself in the cycle in which A becomes complete.
From the last input row to `done` the frame takes 2M - 1 + (the unit's cycle
count above) cycles. At the default sizes this is about 128 + 134 cycles per
CR frame with k = 4.

## Number format

All data are complex numbers. Each part is a 32-bit two's-complement
fixed-point number with 16 fractional bits (`rbd_pkg::DW`, `FRAC`). The rules:

* A product keeps full precision until it is shifted right by FRAC. This
  rounds toward minus infinity. The result is then cut to 32 bits.
* Sums wrap around. Nothing saturates.
* The divider computes n*conj(d)/|d|^2 from full-precision products and
  truncates the quotient toward zero. A zero divisor gives 0.

  A zero divisor happens when a residual is exactly zero, for example when
  y = 0. The detector then returns s = 0 instead of garbage.

The inputs must be scaled so that A stays well inside the range of +-32768.
The testbenches use channel columns of unit power (E|h|^2 = 1/N per entry),
so A is close to the identity, and QPSK symbols of unit power.

The word length is a choice made in this design. It has not been tuned for
area. All arithmetic functions are in `rbd_pkg` and can be changed there.

## What follows the source architecture and what does not

These parts follow the source architecture:

* the two basic modules (y = x + ab, c = m^H n / p^H q with two Hermitian
  conjugates feeding two multipliers and a divider);
* the module set of the unified CR architecture: four iterative modules for
  r, e, p and s, two coefficient modules for alpha and beta, a multiplier for
  m and two delay registers;
* the unified MINRES architecture: the r and s modules, the alpha module and
  the multiplier, with the residual formed as y_E - A s in an iterative
  module;
* the preprocessing with a lower-triangular systolic Gram array of MAC PEs
  and a matched filter;
* MINRES and CR as stated;
* N = 128, M = 16 (the 128 x 16 configuration) and up to 4 iterations as the
  default sizes.

These are choices made in this design:

* the number format;
* vector-parallel lanes in every module;
* the column-serial matrix multiplier;
* the two-stage coefficient pipeline;
* the sequencer and all cycle counts;
* the streaming interface and handshakes;
* the skew scheme of the systolic array;
* the zero-divisor rule.

This design also departs from the source architecture in these ways:

* **One multiplier for A r_0 and A r_k.** The unified CR diagram shows a
  separate multiplier for the initial A r_0. Here the same multiplier computes
  it before the loop starts.
* **beta's divisor is recomputed.** r_old^H m_old is computed again by the
  beta module from the delay registers, as in the unified diagram. The
  non-unified CR diagram instead reuses alpha's dividend through a delay.
* **The algorithm is chosen at run time.** MINRES and CR share one set of
  modules and are selected per frame. They are not two separate units.
* **GMRES is not implemented.** It gives the same results as CR on this
  Hermitian problem but needs square roots and a Givens-rotation
  least-squares solve.
* **The non-unified architectures are not built separately.** The
  stand-alone MINRES and CR datapaths, with the "Mod" unit, the "-1" scaling
  and a separate output unit, compute the same algorithms. Here they are
  covered by `rbd_unit`.

## Workloads

* **128 x 16, k = 2, 3 or 4 iterations.** Runs directly.
* **128 x 8.** Drive the unused user columns of H with zero. A becomes
  block-diagonal, and the eight real users get exactly the same iterates as on
  an 8-user design. The unused outputs stay 0.

  Correlated channels (Kronecker model) change only the values of H.

`tb_workloads` runs the 128 x 16 case and the four 128 x 8 cases. It uses
64-QAM, CR with k = 2, 3 and 4, and MINRES with k = 4.
* **More than 16 users.** This needs a larger M. The complexity discussion
  goes up to 60 users. Every module is parameterised in M, but the Gram array
  grows as M^2/2 PEs.

## Files

| file | contents |
|------|----------|
| `rtl/rbd_pkg.sv` | number format, complex type, arithmetic functions, `alg_e`, `it_op_e` |
| `rtl/iterative_module.sv` | y = x +/- a*b vector register |
| `rtl/coefficient_module.sv` | c = m^H n / p^H q |
| `rtl/matvec_mul.sv` | column-serial A*v |
| `rtl/gram_matrix.sv` | triangular systolic array for A |
| `rtl/delay_line.sv` | input skew registers of the array |
| `rtl/matched_filter.sv` | H^H y |
| `rtl/rbd_unit.sv` | unified MINRES/CR unit and its sequencer |
| `rtl/rbd_detector.sv` | top level |
| `tb/rbd_tb_pkg.sv` | independent reference arithmetic, reference MINRES/CR, residual norm |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_rbd_detector_full` at the default sizes and `tb_workloads` |

## Verification

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and has a
watchdog. The reference model in `tb/rbd_tb_pkg.sv` reimplements the number
format on 64/128-bit integers. It does not call the design's functions. The
testbenches compare results bit for bit and also check latencies.

* `tb_iterative_module`, `tb_coefficient_module`, `tb_matvec_mul`: random
  operands, every result checked, plus latency, holding of results and the
  zero-divisor rule.
* `tb_gram_matrix`, `tb_matched_filter`: random channels with random input
  gaps, every element of A and y_E checked, plus the `done` timing, extra rows
  being ignored, and back-to-back frames.
* `tb_rbd_unit`: random systems of 5 users, both algorithms, with 2, 3, 4
  and 5 iterations. It checks the results bit for bit and the cycle formulas.
  It checks that the residual falls below that of s = 0. It checks that CR
  with k = M reaches the exact solution to within rounding (residual^2 below
  1e-3 of the initial one). It also checks that zero input gives zero output.
* `tb_rbd_detector` (N=16, M=4, ITER=3): twelve end-to-end frames with QPSK
  symbols and noise. It checks the results bit for bit, the hard decisions,
  the residual and the cycles from the last row to `done`. It counts that CR
  frames, MINRES frames, an algorithm switch, input gaps, an all-zero frame
  and a shortened iteration count each occur.
* `tb_rbd_detector_full`: the same checks at the default sizes (128 x 16,
  k = 4 and k = 2). It takes about 15 s to build and run.
* `tb_workloads`: the evaluated configurations at the default sizes, with
  64-QAM symbols.
  * 128 x 16 with an i.i.d. channel.
  * 128 x 8 with zero-padded users, in four cases: uncorrelated,
    user-correlated (zeta_t = 0.2), BS-correlated (zeta_r = 0.3) and fully
    correlated.
  * The channels use the Kronecker model with exponential correlation. The
    phase theta is 0. Cholesky factors stand in for the matrix square roots.
  * It checks the active users bit for bit against a reference of that size,
    the padded outputs exactly 0, and a lower residual.
  * For 128 x 8, CR with k = 4 must recover every symbol.
  * A Monte-Carlo part runs 200 random 128 x 8 frames through CR and MINRES
    (k = 4) at a noise level where the exact MMSE detector gets about 11 % of
    its PAM decisions wrong. The exact detector is solved in floating point.
    CR must stay within 25 % (+3) of the exact error count. In one run the
    counts were 359 errors for exact MMSE, 362 for CR and 377 for MINRES,
    out of 3200 decisions.
  * It runs in about 10 s.

Residuals at the default sizes, after 4 iterations, with residual^2 of
s = 0 about 20: CR about 5e-4, MINRES about 4e-3.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
        rtl/rbd_pkg.sv tb/rbd_tb_pkg.sv tb/tb_rbd_detector.sv \
        --top-module tb_rbd_detector -o sim
    ./obj_dir/sim

Replace the last file and the top module name to run any other testbench.
The sizes of the reduced tests are `localparam`s at the top of each
testbench.

## Limits

* The arithmetic has not been tuned. The coefficient module's divider is a
  single-cycle combinational divider of an 82-bit dividend. A real
  implementation would pipeline it or make it iterative. This would only
  change the "3 cycles per coefficient" figure.
* There is no overflow detection. The caller must keep the inputs scaled as
  described above.
* BER has been compared with exact MMSE at only one noise level, over 200
  frames. No BER curve has been measured.
