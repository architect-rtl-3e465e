# ARCHITECT datapaths: iterating without choosing a precision first

A fixed-point or floating-point solver for an iterative method has to fix its word length before it starts. If the word is too short, it never reaches the accuracy needed. If it is too long, every iteration pays for digits nobody uses. ARCHITECT removes that choice. Every number is a stream of radix-2 signed digits, most significant first, and every operator is an *online* operator: it emits digit q of its result once it has seen digit q + δ of its inputs. An approximant x^(k) can therefore be used by the next iteration while it is still being computed. The hardware widens the whole triangle of (iteration, digit) pairs as it goes, and stops when the result is good enough or the memory is full. Iteration count and precision are both decided at run time.

This RTL implements that scheme for the two example methods ARCHITECT was evaluated with:

* a 2×2 Jacobi solver, x0' = c0·x1 + d0 and x1' = c1·x0 + d1, with online delay δ = 3;
* a Newton iteration, x' = x/2 + 3/(2a·x), which converges to √(3/a), with δ = 4.

Both sit side by side in `architect_top`.

## Signed digits and digit vectors

A digit is a pair (p, n) with value p − n ∈ {−1, 0, 1}. It is `sd_t` in `architect_pkg`. A vector x = Σ x_i 2^−(i+1) is a fraction in (−1, 1). Constants and initial guesses enter as two bit planes of CW = 32 digits, with digit i at bit CW−1−i.

Online operators need no carry chain across the digits of a number, so an approximant can grow by one digit at a time indefinitely. The price is state. A multiplier or divider working on approximant k must remember:

* the digits of its operands received so far;
* its partial residual, which is as long as those operands.

Several approximants are in flight at once, so that state exists once per approximant.

## Storing a triangle: the Cantor layout

Digits are kept in RAMs of D words of U digits each (default U = 8, D = 2^10). Digit p of approximant k goes to word cpf(k, ⌊p/U⌋), position p mod U, where

    cpf(k, c) = (k + c)(k + c + 1)/2 + c

is the Cantor pairing function. It numbers the (k, c) plane along anti-diagonals: (0,0)→0, (1,0)→1, (0,1)→2, (2,0)→3, and so on. Neither the number of approximants nor their length has to be known in advance. The RAM simply fills diagonal by diagonal.

With D = 2^10 the diagonals k + c ≤ 44 fit (990 words), so:

* at most 45 approximants, counting the initial guess;
* at most 8·44 = 352 digits for one approximant.

D = 2^17 gives 512 approximants and 4088 digits. The same addressing is used for:

* the digit vectors in `digit_store`, one RAM per variable;
* the operand copies and residuals inside each operator.

Writing the first digit of a word clears the rest of that word. The operators likewise treat a residual chunk touched for the first time as zero. No memory ever needs clearing between runs, and the testbenches check this by running twice over the same RAMs.

## Operators that remember every approximant

`ap_mac` is the online multiplier with an addend, z = x·y + d. `ap_div` is the online divider with an addend, z = x/y + e. Both keep one residual per approximant, stored in the Cantor layout as U-bit chunks.

A *step* of approximant k consumes input digit j of each operand and produces output digit j − δ. To do so it must update a residual that is ⌊j/U⌋ + 1 chunks long. The operator does this one chunk per clock, from the least significant chunk to the most significant. That is why a step takes more cycles the deeper into the number it is.

The residual is stored in two's complement: a small signed integer "head" beside chunk 0, and non-negative U-bit fraction chunks below it. Walking the chunks least significant first, the operator carries two things between chunks in registers:

* the binary carry;
* the bit that the residual doubling 2R shifts across a chunk boundary.

When the head is reached, the complete residual is known. Digit selection is then an exact comparison of the head alone, because the fraction part is never negative:

| operator | residual held | select +1 | select −1 | no digit for |
|---|---|---|---|---|
| multiplier | R = 8w | head ≥ 4 (v ≥ ½) | head ≤ −5 (v < −½) | j < 3 |
| divider | R = 16w | head ≥ 4 (v ≥ ¼) | head ≤ −5 (v < −¼) | j < 4 |

**Multiplier step.** One pass over the chunks computes R' = 2R + X·y_j + Y·x_j + d_j, then subtracts 8z. The new digits x_j and y_j are merged into the stored copies of X and Y in the same pass. A step takes ⌊j/U⌋ + 1 cycles.

**Divider step.** It takes two passes:

1. V = 2R + x_j + (E − Z)·y_j + Y·e_j, which selects z;
2. R = V − 16·z·Y. Here 16Y is Y shifted four digits, so this pass reads chunks c and c+1 of Y together.

The divisor must lie in [½, 1). A step takes 2(⌊j/U⌋ + 1) cycles.

**Why the operators have an addend.** The datapaths the scheme was published with follow each multiplier or divider with a three-digit parallel online adder. Here the addend digit enters the residual at input weight instead. In the divider it is folded into the dividend as x + e·y, and the old quotient digits Z are kept so that (E − Z)·y_j can be formed. A separate adder is then not needed, and the online delays stay 3 for Jacobi and 4 for Newton.

## The schedule: zig-zagging through (k, i)

`sched_fsm` decides which (approximant k, step i) to compute next. Approximant k+1 may compute step i only once approximant k has produced digit i. That digit comes out of k's step i + δ. Steps are handled in groups of δ. After the last step of a group the FSM does one of two things:

* **descend:** go to the previous group of the next approximant, i ← i − 2δ + 1 and k ← k + 1;
* **snap back:** if that next approximant has no group left to do, return to approximant 1 at its next group, k ← 1 and i ← i + (k−1)δ + 1.

For δ = 3 the order of the first steps is

    (1,0..2) (1,3..5) (2,0..2) (1,6..8) (2,3..5) (3,0..2) (1,9..11) ...

Each step begins with one "digit generation" cycle, in which the operators start. For the multiplier it is followed by ⌊i/U⌋ "accumulation" cycles, and for the divider by 2⌊i/U⌋ + 1. The FSM counts them down and then moves (k, i) on.

The run ends in one of two ways:

* on `stop`;
* when the next step's word cpf(k, ⌊i/U⌋) lies beyond the RAM, which sets `exhausted`.

Because the descent runs down the diagonal, the deepest approximant hits the memory limit first. At D = 2^10 both datapaths finish with 44 approximants. Approximant 1 then holds 132 digits (Jacobi) or 176 digits (Newton).

## Don't-change digits

As an iteration converges, the leading digits of successive approximants stop changing. `dontchange_detect` compares each new digit of approximant k with the same digit of approximant k−1. Approximant 0 is the initial guess. While the run of equal digits continues, it records a pointer ψ(k+1) = p + 1 at the end of every whole group of δ equal digits. By the online-delay property, if approximants k−1 and k agree in their first q + δ digits, approximant k+1 agrees with them in its first q digits. Those digits need not be computed.

In the scheduler, elision is one more test at the end of each group. If i − ψ = δ − 1, the next approximant's next group is already known, so the FSM snaps back instead of descending. The elision transitions are built and tested in `sched_fsm`, and the detector and its pointer RAM are complete.

**The datapaths do not skip groups.** To start approximant k+1 at step ψ instead of 0, its operators would need the residual they would have had after step ψ − 1. Neither the residual nor a rule for deriving it exists in this scheme as described. Both solvers therefore run with elision off. They still:

* report equal digits (`out_same`);
* report the stable groups found (`ev_stable`);
* report the pointer the next approximant could start from (`psi_next`).

## The two datapaths

**`jacobi_solver`** (δ = 3, multiplier timing). Two multiply-adds start together for every step (k, i):

* mac0 computes c0·x1^(k−1) + d0 from x1^(k−1)[i], c0[i] and d0[i];
* mac1 is the mirror image, computing c1·x0^(k−1) + d1.

Approximant 0 comes straight from the guess ports. Later approximants come from the two digit RAMs. Each RAM has one read port for the operators and one for the don't-change comparison.

**`newton_solver`** (δ = 4, divider timing). One divide-add produces x^(k) = c/x^(k−1) + x^(k−1)/2:

* the dividend digit is c[i], where c = 3/(2a) is an input;
* the divisor digit is x^(k−1)[i];
* the addend digit is x^(k−1)[i−1], because halving a signed-digit number is a one-digit delay.

The RAM has three read ports: divisor, addend and comparison.

Both solvers produce an output digit stream (`out_valid`, `out_k`, `out_p`, digits), event pulses and `op_error`. `op_error` flags internal inconsistencies and is never expected high.

The operand ranges that work without outside scaling are:

* Jacobi: |x| < 1 and |c| < 1;
* Newton: a in (3, 12], so that √(3/a) and the divisor stay in [½, 1).

## Where this design departs from the published scheme

* The Newton datapath figure labels its constants −½ and −3/(2a). With those the update would not be x/2 + 3/(2ax). This design follows the equation.
* The scheduler figure prints the snap-back update as i + kδ + 1. Only i + (k−1)δ + 1 reproduces the published zig-zag schedules, and that form is used. The printed form is exactly the fault the scheduler test catches.
* Additions are folded into the operators, as described above, instead of separate three-digit parallel adders. The online delays are unchanged.
* A divider step takes 2n cycles, not 2n − 1 (n = ⌊i/U⌋ + 1). Both passes start from the least significant chunk because of binary carries.
* Don't-change digits are detected but not skipped, for the reason given above.
* Residuals are binary two's complement rather than redundant. The residual encoding was not specified.
* Digit RAMs are read one digit per port rather than as three-digit groups from alternating banks. Banking only matters for the separate parallel adders, which are absent here.
* Memory per operator differs from the published figures of 4 block RAMs for the multiplier and 6 for the divider. Here the multiplier has 5 arrays: the residual, plus two bit planes each for X and Y. The divider has 7: the residual, plus two planes each for Y, E and Z. The extra arrays come from the addend streams and from keeping each digit as two planes. At U = 8 and D = 2^10 these are 47,104 and 65,536 bits.
* The host computer and its PCIe link are not modelled. Constants go in and digits come out on plain ports.

## Capacity against the published experiments

* **Jacobi benchmarks.** These are A_m with off-diagonal 1 − 2^−m for m up to 25, b in [0,1) and accuracy 2^−6. Their solutions grow to about 2^(m−1), so they do not fit the (−1, 1) number range directly. Scaling b by 2^−(m+1), together with the accuracy bound, gives an equivalent problem inside the range. At the default size this design then solves m = 0, 1, 2 and 3 in 1, 5, 14 and 31 iterations (`tb_workloads`). At m = 4 the 44 approximants that fit in D = 2^10 are not enough, and the run ends by memory exhaustion.
* **Newton benchmarks.** These take a from 1 to 2^31. Without operand scaling only a in (3, 12] fits. a = 4, 5, 8 and 12 reach accuracy 2^−6 within two iterations.
* **Comparison targets.** These are 100 iterations at 2^11 digits for Jacobi and 10 at 2^11 for Newton. They need D = 2^17; the default is D = 2^10.
* **U = 64 configuration.** It is a parameter change and has not been simulated.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints `TB_RESULT checks=N failures=M` and has a watchdog.

* **`tb_cpf_addr`**: the first addresses of the layout, a 60×60 grid against the formula, and that the first D addresses are all reached.
* **`tb_digit_store`**: random vectors written twice over, read-back on two ports, stale-digit clearing, and reads beyond the RAM.
* **`tb_ap_mac`, `tb_ap_div`**: 100-step random and Newton-like operands on two interleaved approximants. Each result is compared with a 512-bit fixed-point product or quotient, and the cycles per step are checked.
* **`tb_sched_fsm`**: four configurations (δ = 3, 4, 2; multiplier, divider and adder timing; with and without elision) against a reference model and the published order, including cycle counts, exhaustion and stop.
* **`tb_dontchange_detect`**: synthetic converging sequences, interleaved and sequential, and with and without elision. The pointers are compared with the matched prefix rounded to δ-digit groups.
* **`tb_jacobi_solver`, `tb_newton_solver`**: full runs at D = 128. Each approximant is compared with one exact update of its predecessor, within 3·2^−p for p digits. Also checked:
  * digit order and the δ-digit lag between approximants;
  * the cycle count of every step;
  * convergence, including to √(3/a) for Newton;
  * stop on demand;
  * that every mechanism occurred.
* **`tb_architect_top`**: the same checks with the top at its default sizes (U = 8, D = 2^10), both datapaths at once, two runs. It fails if any of the following never happens: accumulation, descent, snap-back, don't-change detection, memory exhaustion or stop on demand. At the default size it finishes in under 100,000 clock cycles.
* **`tb_workloads`**: the two benchmark families at the default size, each stopped by a host model once the approximant meets the accuracy bound (see above).

Each testbench has also been run against a deliberately broken version of its module and fails there. The breaks include:

* an address without its + c term;
* a dropped addend or quotient term;
* the misprinted snap-back update;
* pointers advanced per digit instead of per group;
* swapped wiring in the datapaths and the top.

A digit-selection threshold moved by one is *not* such a break. The redundancy of the signed-digit set absorbs it and results stay correct.

To simulate, for example:

    verilator --binary --timing -Wall rtl/architect_pkg.sv rtl/cpf_addr.sv rtl/digit_store.sv \
        rtl/ap_mac.sv rtl/ap_div.sv rtl/sched_fsm.sv rtl/dontchange_detect.sv \
        rtl/jacobi_solver.sv rtl/newton_solver.sv rtl/architect_top.sv \
        tb/tb_architect_top.sv --top-module tb_architect_top
    ./obj_dir/Vtb_architect_top

## Files

| file | contents |
|---|---|
| `rtl/architect_pkg.sv` | digit type, helpers, Cantor pairing function |
| `rtl/cpf_addr.sv` | (k, c) → word address and exhaustion flag |
| `rtl/digit_store.sv` | per-variable digit RAM |
| `rtl/ap_mac.sv` | online multiply-add with per-approximant residuals |
| `rtl/ap_div.sv` | online divide-add with per-approximant residuals |
| `rtl/sched_fsm.sv` | (k, i) scheduler with accumulation and elision |
| `rtl/dontchange_detect.sv` | stable-digit detection and pointer RAM |
| `rtl/jacobi_solver.sv`, `rtl/newton_solver.sv` | the two datapaths |
| `rtl/architect_top.sv` | both datapaths side by side |
