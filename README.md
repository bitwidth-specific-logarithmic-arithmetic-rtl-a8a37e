# A bitwidth-specific logarithmic (QAA-LNS) multiply-accumulate unit

In a logarithmic number system (LNS) a value is stored as its sign and the
fixed-point base-2 logarithm of its magnitude. A product then costs one
integer addition, which removes the multiplier from the multiply-accumulate
(MAC) units that dominate neural-network training. The hard part moves to
addition. In the log domain the sum of x and y is

    lz = max(lx, ly) + Delta(|lx - ly|)
    Delta+(d) = log2(1 + 2^-d)   when the signs agree
    Delta-(d) = log2(1 - 2^-d)   when they differ

and these two curves cannot be computed exactly in integer hardware. This
design approximates each curve by 16 straight segments on d in [0, 12). Each
segment's slope is a power of two, so the "multiply" in a segment is only a
shift. Beyond d = 12 both curves are smaller than the format's resolution,
and the correction is zero.

What makes it *quantization-aware* (QAA) is how the segments are chosen. The
bin edges, slopes and offsets are fitted for one specific number format.
The fit minimises the error of the whole quantized LNS addition, not the
error of the curve alone. A 12-bit format and a 14-bit format therefore get
different coefficient tables. This matters in training: a table fitted for
the wrong width, or fitted without quantization, lets rounding errors build
up until training diverges.

The RTL provides the complete MAC datapath: LNS multiplier, bin search,
piecewise-linear Delta unit, LNS adder and accumulator. It has tables for
the three formats used in training.

## Number format

An LNS word of T arithmetic bits carries two overhead flags, so it is T+2
bits wide:

| bits      | field  | meaning                                                        |
|-----------|--------|----------------------------------------------------------------|
| [T+1]     | `zero` | the value is 0. log2(0) does not exist, so a flag stands for it. `sign` and `mag` are 0 then. |
| [T]       | `sign` | 1 for a negative value                                         |
| [T-1:0]   | `mag`  | round(log2\|x\| * 2^F), T-bit two's complement, F fractional bits |

With T = 12 and F = 6, `mag` covers log2|x| from -32 to +31.98 in steps of
1/64. That is a range of about 2^-32 to 2^32, with a relative step of about
1.1 %. The formats with tables are:

| name   | T  | F | word bits | default |
|--------|----|---|-----------|---------|
| 11-bit | 11 | 5 | 13        |         |
| 12-bit | 12 | 6 | 14        | yes     |
| 14-bit | 14 | 8 | 16        |         |

`rtl/lns_defs.svh` defines the word as a packed struct (`LNS_STRUCT(T)`).
Ports carry plain `logic [T+1:0]` vectors with the same layout.

## The Delta approximation (`delta_pwl`, `pwl_bin_select`, `lns_pkg`)

This is the core of the design and where most of its area goes. The input
is the distance d = |lx - ly|, an unsigned (T+1)-bit number with F
fractional bits. Within segment i:

    delta = sgn_i * (k_i >= 0 ? d << k_i : d >> -k_i) + off_i     (units of 2^-F)

The right shift truncates toward minus infinity. For d >= 12 * 2^F the
output is 0.

* **Bin search.** `pwl_bin_select` compares d with the 15 inner boundaries
  in parallel. The boundaries ascend, so the results form a thermometer code.
  Its count of ones is the segment index. This comparator bank is the
  largest part of the adder.
* **One unit for both curves.** Delta+ and Delta- have their own boundaries,
  slopes and offsets. The input `sub` (operand signs differ) selects the
  table. The comparator bank, shifter and offset adder are shared.
* **Slope sign.** The approximation is usually written as d * 2^k + o, with
  a positive slope. Delta+ falls with d, so each segment here also stores a
  slope sign (`sgn` = +1 or -1).
* **Table format.** `lns_pkg::pwl_tab_t` is a packed array of 16 segments.
  Each segment holds `{lo, sgn, k, off}`, where `lo` is the segment's lower
  edge. There is one table per curve for each F in {5, 6, 8}.
  `pwl_table(F, sub)` picks one at elaboration. Any other F stops
  elaboration with an error. Shifts range from k = -10 to +3.
* **Output width.** The correction is T+2 bits signed. An assertion checks
  that an in-range correction never exceeds it.

### Where the coefficients come from

The coefficients are fitted offline. Nothing about the fit exists in
hardware. The procedure, for a format (T, F):

1. Draw 10,000 pairs x, y from a normal distribution with variance 3.
   Quantize both to LNS: round log2|x| * 2^F to the nearest integer and clip
   to T bits.
2. The target z~ is the exact sum x+y, quantized the same way and converted
   back to a real number.
3. The candidate z^ is the LNS sum computed by the integer rules above, with
   the candidate table, converted back to a real number.
4. The loss is mean((z~ - z^)^2).
5. The loss is minimised by simulated annealing with a cosine cooling
   schedule, over 3,000 moves:
   - Each move redraws one boundary uniformly between its two neighbours.
   - The two segments that touch the moved boundary are refitted. For every
     slope +/-2^k (k from -10 to 3), the offset is the rounded mean residual
     against the exact curve at every representable d in the segment. The
     pair with the smallest squared error is kept.
   - The starting boundaries are 12 * ((i+1)/16)^1.6.

Against the exact curves, the resulting tables are within 0.053 (11-bit),
0.022 (12-bit) and 0.017 (14-bit) in log2 units for d >= 1. For Delta+ they
are within 0.032 everywhere. Delta- is steep near d = 0 (it goes to minus
infinity), and its first segment carries the largest error, up to about 2 at
d = 2^-F. The annealing accepts that error because the loss weighs such
near-cancellations by the small size of their results.

## Multiplier and adder (`lns_mul`, `lns_add`)

`lns_mul` adds the two magnitudes in a (T+1)-bit two's complement adder and
XORs the signs. A zero flag on either input gives zero.

`lns_add` does the following:

1. Subtract the two magnitudes. The sign of the difference selects the
   larger magnitude and gives d = |lx - ly|.
2. Add `delta_pwl`'s correction to the larger magnitude.
3. Take the result's sign from the operand with the larger magnitude (from x
   when they are equal).

Three special cases bypass the approximation:

* A zero operand returns the other operand unchanged.
* Equal magnitudes with opposite signs give exact zero, since Delta-(0) is
  minus infinity.
* A sum that leaves the T-bit range saturates to the largest or smallest
  magnitude.

The multiplier saturates the same way.

## The MAC (`lns_mac`, top level)

    a, b ──► lns_mul ──► product ──┐
                                   ▼
    acc ──► (clear ? 0 : acc) ──► lns_add ──► acc register ──► acc
                                   (delta_pwl ◄── pwl_bin_select)

* **Accumulator width.** The accumulator has the input format, T+2 bits.
  Nothing is accumulated at a wider width: training in this scheme uses one
  bitwidth for every quantity.
* **One MAC per cycle.** If `in_valid` is high at a rising clock edge, `acc`
  becomes `acc + a*b`. With `clear` also high, it becomes `a*b` and a new
  sum starts.
* **Latency and hold.** `acc_valid` is high in the cycle after an accepted
  pair. Between accepted pairs the register holds its value. `clear` without
  `in_valid` is ignored.
* **Reset.** `rst_n` is asynchronous and active low. It sets `acc` to zero
  (zero flag set).

The whole path from `a`/`b` to the register is combinational: one adder for
the product, a subtractor, 15 comparators, a shifter, the offset adder and
the final adder. The interface and its timing are this design's own choice.
The reference point is a single 100 MHz MAC in a 45 nm library. Pipeline
registers can be inserted between `lns_mul`, the distance computation and
the final add without changing the arithmetic.

Parameters: `T` (arithmetic bits, default 12) and `F` (fractional bits,
default 6). T must leave room for 12 * 2^F in T+1 bits.

## Files

| file                     | content                                                   |
|--------------------------|-----------------------------------------------------------|
| `rtl/lns_pkg.sv`         | segment type, coefficient tables for F = 5, 6, 8, table selection |
| `rtl/lns_defs.svh`       | LNS word struct macro                                      |
| `rtl/pwl_bin_select.sv`  | parallel-comparator bin search                             |
| `rtl/delta_pwl.sv`       | Delta+/Delta- piecewise-linear unit                        |
| `rtl/lns_mul.sv`         | LNS multiplier                                             |
| `rtl/lns_add.sv`         | LNS adder                                                  |
| `rtl/lns_mac.sv`         | MAC, top level                                             |
| `tb/lns_ref_pkg.sv`      | reference model and real-number conversions for the tests  |
| `tb/tb_*.sv`             | self-checking testbenches, one per module, plus `tb_lns_workloads` |

## Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and ends. Each has a
watchdog that counts a failure if it hangs. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl \
        rtl/lns_pkg.sv tb/lns_ref_pkg.sv tb/tb_lns_mac.sv --top-module tb_lns_mac
    ./obj_dir/Vtb_lns_mac

Replace `tb_lns_mac` with any other testbench name. Each one runs in well
under a second.

The reference model (`tb/lns_ref_pkg.sv`) is written independently of the
RTL:

* words are plain integers;
* the segment is found by a linear scan;
* shifts are real multiplications by 2^k followed by floor.

It shares only the coefficient tables, which are the specification.

| testbench             | what it establishes |
|-----------------------|---------------------|
| `tb_pwl_bin_select`   | Random ascending boundary sets, with d on, just below and just above every edge. |
| `tb_delta_pwl`        | Every d for both curves in all three formats, bit-exact. Zero beyond 12. Within 0.06 of the exact curve for d >= 1. |
| `tb_lns_mul`          | Random words, zero operands, saturation. Products checked against real multiplication. |
| `tb_lns_add`          | Gaussian and random operands plus directed cases (cancellation, zero, saturation, d > 12), 12- and 14-bit. Bit-exact, and within 0.06 + 2^-F of the true sum when d >= 1. |
| `tb_lns_mac`          | Default parameters, end to end. 400 dot products of random length with idle cycles, a check after every cycle for value, one-cycle latency and hold, and a reset in mid-sum. Counts Delta+, Delta-, cancellation, zero, saturation, d > 12, clear, hold and reset, and fails if any never occurs. |
| `tb_lns_workloads`    | The three formats side by side on dot products of the lengths found in 3x3 convolutions (27, 576, 4608), bit-exact. Reports the error against real arithmetic. |

The workload test shows what same-width accumulation costs. The mean relative
error of a whole dot product is about 1.09 for 11-bit, 0.13 for 12-bit and
0.08 for 14-bit. With long sums of small terms in a narrow accumulator, the
late terms fall below the accumulator's resolution. This is the effect that
makes the 11-bit format fail in training while 12 and 14 bits succeed.

## How far the RTL follows the published scheme

Taken from the scheme as published:

* the LNS format with sign and zero flags and T = I + F bits;
* multiplication as a T-bit addition with XOR of the signs;
* the max + Delta(|lx - ly|) adder and its sign rule;
* 16 segments with power-of-two slopes on d in [0, 12];
* separate Delta+ and Delta- tables;
* a separate table for each width;
* accumulation at the input width;
* the three trained formats.

This design's own choices:

* **Coefficient values.** The published method (simulated annealing on a
  quantized-sum loss, described above) is followed, but the authors' tables
  are not available, and these are a fresh fit. Expect similar but not
  identical numerical behaviour.
* **Signed slopes.** Each slope carries a sign bit (see above).
* **Saturation.** Out-of-range results are clipped. The published clip
  bounds, -2^(2^I-1)-1 and 2^(2^I-1), do not describe a T-bit word, so the
  T-bit two's complement limits are used.
* **Special cases.** Zero and cancellation are handled as described above.
* **Truncating shifts.** Right shifts truncate.
* **Structure and timing.** The parallel-comparator bin search and the
  single-cycle MAC interface with `clear`/`in_valid`.

Not built:

* The variant without a zero flag, where zero is the smallest magnitude.
  This is an alternative with one less bit.
* The 256-segment approximation of the exponential for the soft-max layer.
  Neither the function it approximates in the log domain nor its
  coefficients are published.
* The integer and floating-point baseline MACs.
* Any real-to-LNS converter. The testbenches convert behaviourally.

The 16-, 18- and 20-bit hardware configurations (T = 16, 18, 20) have no
published F and no tables. The RTL can be built at those T values with
F = 8, but that is not a known configuration.

To support another format, fit a table with the procedure above and add a
case to `pwl_table` in `lns_pkg`. A table must satisfy three conditions:

* the `lo` values ascend, and `lo` of segment 0 is 0;
* every `lo` is below 12 * 2^F;
* every in-range correction fits in T+2 signed bits (the assertion in
  `delta_pwl` checks this).
