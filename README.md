# Digit stability inference for an online-arithmetic Jacobi solver

Iterative solvers such as Jacobi refine an approximate solution x(k) step after step. Each
approximant agrees with the previous one in more of its leading digits. If arithmetic runs most
significant digit (MSD) first, digits that can no longer change need not be generated again. The
savings grow with every iteration.

With ordinary binary numbers such digits cannot be identified ahead of time. A carry from far
below can still flip them. With a *redundant* number representation (radix-2 signed digits
{-1, 0, 1}), a digit is determined by a bounded window of the value. That makes it possible to
prove how many leading digits are final.

This RTL implements that idea for a 2x2 linear system A x = b. The datapath is built from online
(MSD-first, digit-serial) multipliers and adders and runs up to 2048 digits of precision. Runtime
logic compares successive approximants, infers how many of their leading digits are stable, and
skips generating those digits in later iterations.

## Stability inference

Write G = -M^-1 (A - M) for the Jacobi iteration matrix, with M = diag(A), and g = ||G||_inf < 1.

The comparator counts the leading digits that approximant k and approximant k-1 have in common,
elementwise. D is the smallest such count over the vector elements. The first time D > 0, that
iteration is designated k-hat and D is frozen. From then on, the number of leading digits of x(k)
that will never change again is

    psi(k) = D + floor(alpha - (k - k-hat + 1) * beta) - 1,
    alpha = log2((1 - g) / 2),   beta = log2(g).

The bound holds because the differences between successive iterates shrink at least
geometrically, by the factor g. Once their sum over all future iterations is below the weight of
a digit, that digit is settled up to the redundancy of the representation.

- **Constants.** The host precomputes alpha and beta and loads them as signed fixed point with
  20 fractional bits. No logarithm is evaluated in hardware.
- **Incremental evaluation.** `stability_ctrl` keeps a 48-bit accumulator. It starts at
  alpha - beta at k-hat and subtracts beta at each later iteration. Taking the floor means
  keeping only the integer part of the accumulator. psi is clamped to [0, PMAX].
- **Rounding.** To stay on the safe side, round alpha down and beta up when converting them.

### Stable digits can still change

In simulation, a digit declared stable by the formula above does occasionally change. Typically
this is a handful of digits per solve: for example, 5 changes over the 1028 approximants of the
largest run below.

The argument behind psi bounds how far the *value* can move. It does not rule out that a nearby
value is written with a *different* redundant digit string. The online operators are free to
produce a different string, and sometimes they do.

The design therefore does not trust psi blindly:

- `digit_compare` reports the lowest digit position that changed in each pass (`first_diff`).
- It counts every change of a digit declared stable (`violations`, a top-level output).
- The skip mechanism only relies on a saved state after the comparator has confirmed it (next
  section).

## Number format

- Every value is a fraction in (-1, 1): each element of every approximant, the constants, and
  every intermediate sum.
- A value is a string of digits d1 d2 d3 ... with weights 2^-1, 2^-2, ...
- A digit is 2 bits, read as a two's complement number (`dsi_pkg::digit_t`): `01` = +1,
  `11` = -1, `00` = 0. The code `10` never occurs.
- Precision `prec` (at most PMAX = 2048) is set per solve. Digits beyond `prec` are fed as zeros.

## Online operators

Both operators take one digit of each operand per `step` and, after their *online delay*, return
one digit of the result per step. The digit of weight 2^-j comes out on step j + delta.

- **`online_mul`** (delta = 3) is the classic serial-serial multiplier.
  - Registers:
    - the prefixes X and Y of both operands
    - a residual w
    - a one-hot weight register
  - Each step computes v = 2w + (x_j * Y_j + y_j * X_(j-1)) * 2^-3 and selects +1, 0 or -1 from
    v against +-1/2.
  - The residual is kept exactly over the full width: PMAX + 12 bits. Selection is exact, and one
    digit comes out per cycle at any significance.
  - An assertion checks |w| < 2.
- **`online_add`** (delta = 2) keeps a 6-bit residual in units of 1/4.
  - The recurrence is v = 2w + x + y.
  - It outputs +1 if v >= 2 and -1 if v < -2.
- Both operators have the same control set:
  - `clear`: return to the initial state.
  - `step`: take one digit of each operand.
  - `save`: copy the state reached by this step into a one-entry shadow.
  - `restore`: load the shadow back.

  This works because an online operator's state after t input digits depends only on those
  t digits.

## Jacobi datapath

For N = 2 the Jacobi step is

    x0(k+1) = c0 * x1(k) + d0,   c0 = -a01/a00,  d0 = b0/a00
    x1(k+1) = c1 * x0(k) + d1,   c1 = -a10/a11,  d1 = b1/a11

`jacobi_datapath` wires two multipliers and two adders crosswise in exactly this way.

- **Online delay.** The total is 3 + 2 = 5 digits: input position t produces output digit t - 5.
- **d input timing.** Because the adder starts three steps after the multiplier, the d input is
  fed with digit t - 3.
- **Latency.** Registered operator outputs put each output digit on `z0`/`z1` two clock cycles
  after the step that produced it. `z_pos` carries the position.
- **Old digits.** The datapath also returns, on `old0`/`old1`, the digit of x(k) at the same
  position, for the comparator. It keeps a 5-digit history for this, which is saved and restored
  together with the operators.

## Scheduling a pass and skipping stable digits

`dsi_sequencer` runs one *pass* per iteration.

1. It reads positions t = L+1 ... prec+5 of the approximant and the constants, one per cycle.
2. It steps the datapath.
3. It writes output digits L-4 ... prec of the new approximant back in place.
4. Five drain cycles flush the operator delay.
5. The stability controller is updated with the pass's D.
6. The stop test runs.

**In-place update.** The approximant memory is updated in place. A digit is written eight cycles
after it was read (1 memory latency + 5 online delay + 2 pipeline). So a write never overtakes a
read still to come, and an assertion checks this.

**Skipping.**

- If pass k-1 established that the first psi(k-1) digits of x(k-1) are stable, x(k) repeats them.
- The operators therefore pass through the same state at input position S = psi(k-1) in pass k
  as in every later pass.
- Pass k saves that state. Pass k+1 restores it, begins reading at L = S+1, and skips generating
  its first L-5 output digits. Those digits are already in memory.
- A saved state stays usable for all later passes. A new one is taken only when psi has grown
  beyond it.
- It is only taken from S >= 6. Earlier, the output would start before digit 1.

**Confirmation.** Because stable digits can change (see above), a saved state at position S is
kept after a pass only if the comparator saw no digit at or below S change during that pass.
Otherwise the next pass is a full one, which takes a fresh snapshot.

With this rule, a solve with skipping produces exactly the same digits and the same number of
passes as the same solve with skipping disabled (`skip_en = 0`). The end-to-end testbench checks
this on every case.

**Stopping.** The solve stops when psi(k) >= `target` (`converged`) or after `max_iter` passes.

## Using the solver

`dsi_jacobi_top` has six digit memories, selected by `host_bank` (`dsi_pkg::bank_e`):

| Bank | Holds |
|------|-------|
| 0, 1 | x0, x1: load x(0), read the result |
| 2, 3 | c0, c1 |
| 4, 5 | d0, d1 |

- **Memory access.** Address a holds digit a+1. The host port works only while `busy` is low.
  Read data appears one cycle after `host_re`.
- **Configuration.** Set `prec`, `target` (<= prec), `max_iter`, `alpha`, `beta`, `skip_en`, then
  pulse `start`.
- **While running.** `busy` stays high until `done`.
- **Status outputs:**
  - `iterations`, `cycles`
  - `digits_generated`, `digits_skipped`
  - `psi_sum`
  - `restores`
  - `khat_valid`, `d_held`, `psi`, `psi_next`
  - `violations`
- **Scaling.** The host must scale the system so everything stays in (-1, 1). For the test matrices
  A_m = [[1, 1-2^-m], [1-2^-m, 1]], the solution grows up to 2^m * |b|. The testbench therefore
  scales b by 2^-(m+1).
- **Accuracy.** An approximant with `target` stable digits is within about 2 * 2^-target of the
  exact solution (checked in the testbench).

## Measured behaviour

These are cycle counts of whole solves at the default PMAX = 2048. The matrix is A_m above and b
is random. "No skip" is `skip_en = 0`.

| m | prec | target | cycles, no skip | cycles, skip |
|---|------|--------|-----------------|--------------|
| 1 | 48   | 32     | 2 074           | 1 634        |
| 2 | 64   | 48     | 9 317           | 6 739        |
| 3 | 80   | 60     | 29 946          | 20 941       |
| 5 | 96   | 64     | 157 069         | 113 582      |
| 1 | 1040 | 1026   | 1 082 484       | 557 755      |

The last row is accuracy 2^-1024, the most demanding point of the original evaluation. It takes
1028 passes, skips 519 649 digit generations through 1016 restores, and runs in about 20 s of
verilator simulation. The m = 5 solve takes 1441 passes.

Without skipping, a pass costs prec + 13 cycles. With skipping, it costs prec + 13 - L, so the
saving approaches a factor of two once psi grows with every pass. Real numbers vary from run to
run: b is random.

## Where this departs from the original design

- **Operator state.** The original operators keep their arbitrary-precision state in memory.
  They grow without bound, and get slower per digit as the digits become less significant.
  - Here each operator holds its state in registers of PMAX + 12 bits. One digit is produced per
    cycle, and precision is limited to PMAX digits per solve (a parameter).
  - At PMAX = 2048 this is roughly 33 k flip-flops for the whole solver.
- **Stopping rule.** The original stops when the residual norm ||A x - b||_2 falls below a
  threshold. That needs arithmetic this datapath does not have. Here the stop is on the number of
  stable digits, with `max_iter` as a backstop.
- **Skip mechanism.** How generation of stable digits is skipped is not specified in the source
  description. The snapshot, restore and confirm scheme above, the in-place approximant memory,
  and the comparator's `first_diff`/`violations` outputs are this design's own.
- **Fixed-point format.** Q11.20 for alpha and beta, and the accumulator form of psi, are choices
  of this design.
- **Encoding and I/O.** The 2-bit digit code, the memory organisation (one 1R1W bank per vector
  element or constant, registered read), the host port, and reset are this design's choices.
  Reset is asynchronous and active low.
- **Non-integer m.** Matrices with non-integer m have constants with infinitely long digit
  strings. They have to be truncated to `prec` digits by the host. Only integer m was simulated.

## Files and simulation

All files are in `rtl/`, one module or package per file:

- `dsi_pkg`: digit type, delays, fixed-point format
- `online_mul`, `online_add`
- `digit_mem`
- `jacobi_datapath`
- `digit_compare`
- `stability_ctrl`
- `dsi_sequencer`
- `dsi_jacobi_top`

Each file starts with a description of its interface and timing.

`tb/tb_<module>.sv` holds a self-checking testbench per module. Each compares against reference
models computed independently, in wide exact arithmetic, and prints
`TB_RESULT checks=<n> failures=<n>`. `tb_dsi_jacobi_top` runs the unmodified top (PMAX = 2048)
through six solves:

- every solve twice, with and without skipping
- including a run stopped by `max_iter`
- including the 2^-1024 case

It counts each mechanism (k-hat found, restores, skipped digits, convergence, max_iter stop,
stable-digit changes). Simulate any of them with:

    verilator --binary --timing --assert -Irtl --top-module tb_dsi_jacobi_top \
        rtl/dsi_pkg.sv tb/tb_dsi_jacobi_top.sv -Mdir obj -o sim && obj/sim

Verilator finds the other modules through `-Irtl`. To change precision, override `PMAX` on the
top. All widths derive from it.
