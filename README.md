# Reduced precision checking for a single-precision FPU

A floating point unit can be checked without duplicating it. The RPC unit in this repo takes
each operation the FPU performs and repeats it on a much narrower floating point unit. For
32-bit IEEE operands, the default narrow unit is 16 bits wide. It then asks a single question:
is the full-precision result consistent with the narrow one?

Both units round. So the answer is not "are they equal" but "is their difference inside a small
window that an error-free FPU can never leave". A flipped bit or a stuck adder cell in the
FPU moves the result out of that window, unless the error is small. Errors that slip through
have a bounded relative size, about 2^-K, where K is the number of fraction bits the checker
keeps. The check therefore trades hardware (a (9+K)-bit adder and a (9+K)-bit multiplier
instead of a second 32-bit FPU) against how small an error it must see.

The RTL covers the checker: the narrow arithmetic, the choice of what to compute, the
comparison, the operand storage and a top level that snoops an FPU's issue and result ports.
The full-precision FPU being checked is not part of the RTL. The testbenches use a behavioural
model of it.

## Number formats and the "high part" of a word

A checker word has 9+K bits:

```
  [8+K]      sign
  [7+K:K]    8-bit exponent, bias 127 (the same field as IEEE single)
  [K-1:0]    K fraction bits (implicit leading one)
```

The exponent field is the same as in single precision. So the high part of a 32-bit word X is
simply its top 9+K bits, `X^H = X[31:23-K]`. X^H is X truncated toward zero, and it is already a
valid checker word. Truncation costs no logic: the checker's operands are wires taken from the
FPU's operands and result.

`K` is a parameter of every block, from 1 to 23 (checker widths 10 to 32 bits). The default of
7 gives a 16-bit checker.

## Forward and reverse checking

For each FPU operation, `check_ctrl` decides which narrow computation to make and which high
part to compare it with:

| FPU operation            | signs                | checker computes | compared with | mode           |
|--------------------------|----------------------|------------------|---------------|----------------|
| A + B                    | S_A = S_B            | A^H + B^H        | C^H           | `CHK_FWD_ADD`  |
| A − B                    | S_A ≠ S_B            | A^H − B^H        | C^H           | `CHK_FWD_ADD`  |
| A + B                    | S_A ≠ S_B, S_C = S_A | C^H − B^H        | A^H           | `CHK_REV_A`    |
| A + B                    | S_A ≠ S_B, S_C = S_B | C^H − A^H        | B^H           | `CHK_REV_B`    |
| A − B                    | S_A = S_B, S_C = S_A | C^H + B^H        | A^H           | `CHK_REV_A`    |
| A − B                    | S_A = S_B, S_C ≠ S_A | A^H − C^H        | B^H           | `CHK_REV_B`    |
| A × B                    |                      | A^H × B^H        | C^H           | `CHK_FWD_MUL`  |
| A ÷ B                    |                      | C^H × B^H        | A^H           | `CHK_REV_DIV`  |
| √B                       |                      | C^H × C^H        | B^H           | `CHK_REV_SQRT` |

**Forward checking** recomputes the FPU's result from the operands. That only works when the
narrow computation cannot lose more precision than the truncation already did. It holds for
magnitude-adding operations and for multiplication. It does not hold for an effective
subtraction of nearly equal numbers. There the truncation error of the operands survives
while the result shrinks, so the narrow difference says nothing about the true one.

**Reverse checking** handles those cases. The subtraction is rewritten as an addition whose
result is one of the original operands, and that operand is recovered from C and the other
operand. Whichever operand shares the sign of C is the larger one, and it is the one
recovered. This is why the mode depends on S_C as well as on the operand signs.

Division and square root are reverse checked as well. This lets them reuse the checker
multiplier, so the checker needs no divider and no square-root unit. In square-root mode the
recovered B' takes the sign of C, so that √(−0) = −0 checks cleanly (see departures below).

## The Diff test

`diff_compare` turns the comparison into one integer subtraction. It drops the sign bits and
reads the remaining 8+K bits of each word as an unsigned integer, exponent above fraction:

```
Diff = int(ref[7+K:0]) − int(chk[7+K:0])
error = (sign(ref) != sign(chk)) || Diff < −1 || Diff > UB
UB = 1 for add/sub, 3 for mul/div/sqrt
```

Within one binade, a Diff of n means the two words are n checker ulps apart. Reading exponent
and fraction together as one integer also makes the test correct across a binade boundary: the
largest fraction of one exponent is adjacent to the smallest fraction of the next. One subtractor
and two constant comparisons make up the whole comparator.

Why these windows hold for a fault-free FPU:

* The reference high part (C^H, or A^H/B^H in reverse modes) is a truncation, so it is never
  above the exact value and is less than one ulp below it.
* The checker's result rounds to nearest. Its inputs are truncated, so it may sit slightly
  above or below.
* For addition, the errors add up to less than two ulps in total, which with integers leaves
  Diff in [−1, 1].
* For a product, each truncated factor loses up to one ulp of relative size. After
  normalisation the error is under 4 ulps, leaving [−1, 3].
* Division and square root, checked as products, inherit the multiplication bound.

There are rare cases where the checker's result lands one exponent below the reference's. The
integer reading still keeps Diff within the same window there. The end-to-end testbench counts
these cases ("corner"), and none has produced a false alarm.

## Suppression

Some results are not checked. `chk_unchecked` is raised, `chk_error` is held low, and the
result is counted as unchecked. This happens when:

* the FPU reports overflow, underflow, invalid or divide-by-zero (its flags come with the
  result), or
* an operand that the operation reads, or the result, is a denormal, infinity or NaN.

The window proofs assume normal numbers with the implicit leading one. A denormal's high part
does not fit the checker's format, and infinities and NaNs have no magnitude to compare.
Whether the operands are standard is decided from the full 32-bit operands at issue time, and
only that one bit is stored.

## The narrow arithmetic (`rp_addsub`, `rp_mul`, `rp_fpu`)

`rp_addsub` is a conventional floating point adder in (9+K) bits. The steps are:

1. Swap by magnitude.
2. Align the smaller operand with guard, round and sticky bits.
3. Add or subtract.
4. Normalise by one right shift or a leading-zero left shift.
5. Round to nearest, ties to even.

`rp_mul` forms the exact (K+1)×(K+1) product of the mantissas, normalises it by at most one
place, and rounds to nearest even with a guard and a sticky bit. `rp_fpu` holds one of each
and feeds only the unit the mode needs. The other unit's inputs are held at zero, so it does
not toggle.

These corner rules belong to this design:

| situation                                      | result                                  |
|------------------------------------------------|-----------------------------------------|
| operand exponent field 0                       | read as zero                            |
| exact zero difference                          | +0                                      |
| exponent field would be ≥ 255                  | infinity (field 255, fraction 0)        |
| exponent field would be exactly 0              | field 0, keeping the normalised fraction |
| exponent field would be below 0                | signed zero                             |

The exactly-0 case matters for results next to the smallest normal number. If they were
flushed to zero, a fault-free result at the bottom of the normal range would give a large
integer Diff. Keeping the fraction makes Diff count ulps there as well. Suppression keeps
these cases rare: denormal operands and underflowing results are never checked.

## Pipeline and interfaces (`rpc_top`, `operand_buffer`)

```
issue_* --> [operand_buffer: op, A^H, B^H, nonstd] --head--+
                                                           v
res_c, res_flags ---------------------------------> [check_ctrl] --reg--> [rp_fpu]
                                                                            |
                                                    [diff_compare] <--------+
                                                           |
                                                          reg --> chk_*
```

* **Issue.** Each cycle with `issue_valid && issue_ready`, the operation and the high parts of
  A and B are pushed into `operand_buffer`, a FIFO of `BUF_DEPTH` entries (default 4).
  `issue_ready` falls when the buffer is full and no result is leaving in the same cycle. The
  FPU must then hold its issue.
* **Result.** Each `res_valid` pops the oldest entry. Results must come in issue order;
  assertions catch a result with no outstanding operation. The checker waits for the FPU even
  for forward checks. Its operands are at hand earlier, but the comparison needs C.
* **Cycle 0.** `check_ctrl` chooses the mode, operands, reference and window from the buffer
  head and C. All of this is registered.
* **Cycle 1.** `rp_fpu` and `diff_compare` produce the verdict. It is registered.
* **Cycle 2.** `chk_valid` is high for one cycle, with `chk_error`, `chk_unchecked`, the
  signed `chk_diff` and `chk_mode`.

The verdict follows the result by exactly two cycles, and a new result is accepted every
cycle. The checker therefore never slows an FPU that issues one operation per cycle, unless
more than `BUF_DEPTH` operations are in flight at once. Reset is asynchronous and active low.
The buffer array and the cycle-0 registers have no reset; they load only when an entry or
result is valid.

## Parameters

| parameter   | default | meaning                                                            |
|-------------|---------|--------------------------------------------------------------------|
| `K`         | 7       | fraction bits of the checker; width 9+K (16 bits), legal 1..23     |
| `BUF_DEPTH` | 4       | operations the FPU may have in flight (operand buffer entries)     |

At the defaults the top synthesises to roughly 270 cells plus 84 flip-flops and a 4×36-bit
array, in a generic yosys cell library.

## How far it can be trusted

Each block has a self-checking testbench. All of them compare against references computed in
double-precision `real` arithmetic. A double rounded once to the narrow format gives the correctly
rounded narrow result for every operation here, so these references are exact.

| testbench           | what it does                                                             | checks |
|---------------------|--------------------------------------------------------------------------|--------|
| `rp_addsub_tb`      | random and edge operands at K = 7, 1, 23, against the rounded exact sum   | 60 000 |
| `rp_mul_tb`         | the same for products                                                    | 60 000 |
| `rp_fpu_tb`         | every mode, including the square-root sign rule                          | 20 000 |
| `check_ctrl_tb`     | the mode table above, checked rule by rule and by value                  | 160 006 |
| `diff_compare_tb`   | window edges and random words                                            | 20 018 |
| `operand_buffer_tb` | random push/pop, full and empty, simultaneous push and pop               | 20 001 |
| `rpc_top_tb`        | 20 000 operations end to end at the defaults, see below                  | 55 917 |
| `rpc_sweep_tb`      | K = 1..23 side by side, fault-free and fault-injected                    | 345 113 |

`rpc_top_tb` drives a behavioural single-precision FPU (`fp32_fpu_model`). It has latencies of
3 (add/sub), 4 (mul) and 12 (div, sqrt) and in-order results. It runs a random mix of the five
operations, with close-magnitude subtractions, overflows, underflows, invalid square roots,
divisions by zero and special operands. A third of the results get one or two bits flipped.
For every verdict the testbench checks:

* the 2-cycle latency;
* agreement with an independent model of the rules above, in mode, Diff, error and
  suppression;
* that no fault-free, checkable result is ever flagged;
* that a forward-checked result is always flagged when a flipped bit lies 3 or more places
  above the checker's last bit;
* that no suppressed result raises an error.

It also fails if any mode, any suppression cause, the exponent corner case, a detection or a
buffer-full stall never happens.

`rpc_sweep_tb` repeats the error-injection experiment for every checker width from 10 to 32
bits. Each width gets 1000 random inputs per operation, each with one flipped result bit. It
sorts the outcomes into detected, undetected and unchecked. No width raised a false alarm. At
the default width of 16:

| op   | detected | undetected | unchecked | undetected above ~Diff_max·2^-K |
|------|----------|------------|-----------|---------------------------------|
| add  | 445      | 555        | 0         | 3                               |
| sub  | 463      | 537        | 0         | 3                               |
| mul  | 442      | 557        | 1         | 0                               |
| div  | 431      | 566        | 3         | 0                               |
| sqrt | 461      | 539        | 0         | 0                               |

Detection grows steadily with width. At 32 bits it reaches about 95 % of single-bit flips;
what is missed there are flips in the lowest bits. Most undetected errors are tiny. The few
that are larger than the simple estimate max|Diff|·2^-K of the largest undetectable relative
error are add/sub cases with cancellation or exponent changes. That estimate is known not to
cover such corner cases.

Each testbench was also run against a deliberately broken copy of its block, and each one failed
against its copy. The breaks were:

* round-half-up in the adder;
* the multiplier's sticky bit forced to zero;
* a swapped reverse-subtraction operand;
* the multiply window narrowed to [−1, 1];
* a wrong FIFO count on a simultaneous push and pop;
* the square-root sign not forced;
* errors not masked on suppressed results.

## Departures and choices not taken from the source design

* **No full-precision FPU.** The design checks an existing FPU and does not describe one. The
  RTL only exposes its issue and result ports. `fp32_fpu_model` stands in for it in simulation.
* **Operand storage is a FIFO of depth 4 that stalls issue when full.** The source names
  operand buffers, but gives neither a size nor a policy. It also mentions clock gating for
  them; here that is only a write enable on the entry being written.
* **Windows are inclusive.** The source writes the test as LB < Diff < UB, and it also gives the
  allowed ranges as the closed integer sets [−1, 1] and [−1, 3]. The closed ranges are what is
  implemented, and no fault-free result fell outside them in simulation.
* **Square root takes operand B** and its check compares against B^H. The recovered B' takes
  the sign of C.
* **Non-standard operands and results are not checked.** This is in addition to the four
  exception flags.
* **Exponent field 0 at the checker's output** keeps the normalised fraction instead of
  flushing (see the narrow arithmetic section). Field 255 saturates to infinity.
* **Rounding.** Both the checker and the FPU model round to nearest even. Other IEEE rounding
  modes are not implemented.
* **Single precision only.** The same scheme carries over to double precision with an 11-bit
  exponent, but it is not parameterised for that.

## Simulating

Any testbench runs with plain Verilator 5. List the package files first; `-y` finds the
modules:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/rpc_pkg.sv tb/rpc_tb_pkg.sv tb/rpc_top_tb.sv --top-module rpc_top_tb
./obj_dir/Vrpc_top_tb
```

Every testbench ends with a line `TB_RESULT checks=<n> failures=<m>` and has a watchdog. Unit
testbenches instantiate their block at several values of `K`. `rpc_top_tb` uses the top with
no parameter overrides. `rpc_sweep_tb` instantiates 23 copies of the top (through
`rpc_width_run`) and takes the longest to build.

To change the checker width, override `K` on `rpc_top`. All widths, operand selections and
windows follow from it. The windows themselves do not depend on K. They are the constants in
`rpc_pkg`.
