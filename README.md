# POSAR: a posit arithmetic unit in place of a RISC-V FPU

Posits are a floating-point format that spends its bits differently from
IEEE 754. A posit of `ps` bits has four fields:

- **Sign.**
- **Regime.** This is a run of identical bits ended by the opposite bit, so its length varies. The regime value `k` counts the run: `k = m-1` for a run of `m` ones and `k = -m` for a run of `m` zeros.
- **Exponent.** Up to `es` bits.
- **Fraction.** Whatever bits are left.

The value is

    (-1)^s * 2^(k * 2^es + e) * 1.f

A negative posit is the two's complement of its magnitude. Values near 1 have short regimes and many fraction bits, and very large or very small values trade fraction bits for range. There are only two special patterns: `000…0` is zero and `100…0` is NaR ("not a real"). There are no infinities, no NaN payloads and no subnormals. Results never overflow to infinity or underflow to zero: they saturate at `maxpos` and `minpos`.

POSAR is an execution unit that runs every RISC-V single-precision (F extension) instruction on posits instead of IEEE floats. Software stays as it was: `fadd.s`, `fmul.s`, `flw`, `fcvt.w.s` and so on. Only the bit patterns in memory and in the `f` registers are posits. The unit is parameterised by the posit size `PS` and the exponent size `ES`. The default is Posit(32,3). Posit(8,1) and Posit(16,2) are the other intended sizes.

The RTL here is the unit together with its `f` register file. The surrounding RISC-V core is not part of this RTL: fetch, decode, integer pipeline, caches and memory. The unit's ports are where that core connects.

## The unpacked posit

Every arithmetic operation follows the same three steps:

1. **Decode** each operand into fields.
2. **Compute** on the fields.
3. **Normalise and encode** the result back into a bit pattern, rounding once on the way.

The decoded form (`posit_decoder`) has these fields:

| field | meaning |
|-------|---------|
| `s`   | sign |
| `sn`  | special: the pattern is 0 (`s = 0`) or NaR (`s = 1`) |
| `k`   | regime value, signed |
| `e`   | exponent (ES bits, plus one spare bit for carries) |
| `f`   | fraction as an integer with the hidden 1 at bit `fs` |
| `fs`  | number of fraction bits below the hidden bit |

Keeping `fs` explicit is the central idea of the datapath. The arithmetic units never shift fractions to a fixed width:

- The multiplier multiplies `f1 * f2` and sets `fs3 = fs1 + fs2`.
- The divider widens the dividend and subtracts the sizes.
- Only the final normalisation step brings the result back to a canonical form.

All internal widths are fixed by functions in `posar_pkg` so that no intermediate value overflows:

- `f` is `max(3*PS, 33)` bits wide.
- `k` is `$clog2(PS)+4` bits wide.

Decoding a negative pattern first takes its two's complement. After the regime, the exponent bits are whatever follows. Exponent bits that fall off the end of the word are treated as zeros.

## Rounding: on the bit string, not on the fraction

This is the part that most differs from an IEEE FPU. In a posit, the fraction width depends on the regime length, so "round the fraction to N bits" has no fixed N. The encoder (`posit_encoder`) works as follows:

1. **Build the bit string.** It writes the full, unbounded posit: regime run, terminating bit, `ES` exponent bits, then all fraction bits. This string is wider than `PS`.
2. **Round to nearest even.** It keeps the top `PS-1` bits after the sign. The first dropped bit is the guard bit. The OR of all later bits, together with an incoming sticky bit `bm`, is the sticky bit. It adds one to the kept bits when the guard bit is 1 and either the sticky bit or the last kept bit is 1.
3. **Saturate.** If the regime alone no longer fits (`k >= PS-2` or `k < -(PS-2)`), the result is `maxpos` or `minpos` with the sign applied. A nonzero result therefore never rounds to zero or to NaR.
4. **Apply the sign.** A negative result is two's-complemented at the end.

Rounding across the regime and exponent fields is what makes this correct. For example, a rounding carry can turn `0111…1` into `1000…0`, which lengthens the regime. The encoder needs no special case for it, because the carry simply propagates through the bit string.

`bm` is the sticky input. Units that discard information set it: the adder for bits shifted out of the aligned operand, and the divider and square root when their remainder is nonzero.

### Normalisation (`posit_normalize`)

The arithmetic units return `k`, `e`, `f` and `fs` that are not yet canonical:

- the exponent may have carried past `2^ES` or borrowed below zero;
- the hidden bit may sit anywhere in `f`.

The normaliser fixes this in the following steps:

1. **Find the scale.** It finds the leading one of `f` and forms the total scale `k*2^ES + e + msb - fs`.
2. **Split the scale.** It splits the scale into a regime and an exponent.
3. **Clamp the regime.** It clamps the regime to `±PS`. Any clamped value saturates in the encoder.
4. **Realign the fraction.** It realigns `f` to `2*PS` fraction bits and ORs any bits shifted out into `bm`.

A zero fraction becomes the posit zero.

This step is needed by the arithmetic algorithms but never written out as a separate stage. Making it its own module keeps every arithmetic unit small and lets them all share one rounding path.

## The arithmetic units

**Add/subtract.** This is `posit_addsub_selector` plus `posit_adder`.

1. **Select.** The selector turns the request into an effective operation:
   - adding two numbers of opposite sign is a subtraction of magnitudes;
   - it also gives the sign of the result;
   - it says whether to swap the operands so that the larger magnitude comes first.
2. **Widen.** The adder brings both fractions to `2*PS-4` fraction bits.
3. **Align.** It shifts the smaller operand right by the difference in scale `(k1-k2)*2^ES + (e1-e2)`. Bits shifted out become `bm`.
4. **Add or subtract** the magnitudes.

The special cases are:

- a NaR operand gives NaR;
- a zero operand returns the other operand, negated for `0 - b`;
- exact cancellation gives 0.

**Multiply** (`posit_multiplier`). Regimes add, exponents add, and the fractions are multiplied exactly with `fs3 = fs1 + fs2`. The product is exact, so `bm` is 0. NaR propagates, and a zero operand gives 0.

**Divide** (`posit_divider`). Exponents subtract. When `e1 < e2`, the exponent borrows `2^ES` from the regime, so `e` stays non-negative. The dividend fraction is shifted left by `PS` bits before an integer division, which leaves at least `PS` quotient bits. A nonzero remainder sets `bm`. Division by zero gives NaR, and `0 / x` gives 0.

**Square root** (`posit_sqrt` plus `uint_sqrt`).

1. **Special cases.** 0 gives 0. NaR and negative numbers give NaR.
2. **Halve the scale.** The wrapper halves the total scale `k*2^ES + e`. When the scale is odd, the fraction is doubled so that the halving is exact.
3. **Fix the fraction parity.** The fraction size must be even, so the integer root has a clean binary point. When `fs` is odd, the radicand is doubled once more.
4. **Take the integer root.** The fraction is widened to `2*PS` fraction bits and passed to `uint_sqrt`. A nonzero remainder sets `bm`.

`uint_sqrt` is the classic non-restoring integer square root. It handles two radicand bits per step and keeps a signed partial remainder `R`. It subtracts `(Q<<2)|1` when `R >= 0` and adds `(Q<<2)|3` otherwise. The new root bit is 1 when `R >= 0`. A final correction step turns a negative `R` into the true remainder, so `D = Q^2 + R` holds exactly. All `DW/2` steps are unrolled into combinational logic.

## The instruction-level unit (`posar`)

`posar` wires the pieces together around the register file (`posit_regfile`). The register file has 32 registers of `PS` bits, three combinational read ports and one write port. Its reset clears every register to 0.

| F instruction | POSAR operation |
|---|---|
| `fadd/fsub/fmul/fdiv/fsqrt` | the units above, then normalise and encode |
| `fmadd/fmsub/fnmsub/fnmadd` | rounded product → re-decoded → adder with `rs3` → rounded again |
| `fsgnj/fsgnjn/fsgnjx` | copy/negate/xor the sign; "negate" is two's complement |
| `fmin/fmax, feq/flt/fle` | signed-integer comparison of the bit patterns |
| `fclass` | bit 1 negative, 4 zero, 6 positive, 9 NaR |
| `fcvt.w.s/fcvt.wu.s` | posit → integer; `rm = RTZ` truncates, any other mode rounds to nearest even; saturates; NaR → `0x80000000` |
| `fcvt.s.w/fcvt.s.wu` | integer → posit, rounded by the shared encoder |
| `fmv.x.w/fmv.w.x, flw/fsw` | move the low `PS` bits, zero-extended on the integer side |

Two properties of posits make these operations cheap:

- Posits order like signed integers. This is why `fmin`, `fmax` and the compares are plain signed comparisons. NaR sorts below every real number.
- Every fused operation is a multiplication followed by an add or subtract of `rs3`. The only extra hardware is a second normaliser and encoder, which round the intermediate product.

Sign handling in the fused operations follows RISC-V:

| operation | result |
|---|---|
| `fmsub` | `a*b - c` |
| `fnmsub` | `-(a*b) + c` |
| `fnmadd` | `-(a*b) - c` |

### Interface and timing

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; active-low asynchronous reset |
| `in_valid` | in | 1 | an instruction is presented this cycle |
| `in_op` | in | `posar_op_e` | operation (see `posar_pkg`) |
| `in_rm` | in | 3 | rounding-mode field of the instruction |
| `in_rd`, `in_rs1..3` | in | 5 | register numbers |
| `in_int` | in | 32 | integer operand, `fmv.w.x` source or `flw` data |
| `out_valid` | out | 1 | result of the instruction issued in the previous cycle |
| `out_int_wr` | out | 1 | the result is for the integer side |
| `out_rd` | out | 5 | destination register number |
| `out_int` | out | 32 | integer result or `fsw` store data |

Timing:

- **Throughput.** Every operation takes one cycle, and one instruction can be issued per cycle.
- **Posit results.** The unit reads its operands, computes the result combinationally, and writes it to `rd` at the next rising edge.
- **Integer results.** These appear on `out_int` one cycle after issue.
- **Back-to-back use.** An instruction may read a register written by the instruction just before it.

The longest paths are the divider and the unrolled square root. A faster clock would need them split into several cycles. Such a change stays local to those units, because the rest of the unit sees only the decoded-field interface.

At Posit(32,3), one synthesis run of the unit produced about 5,600 cells and 1,063 flip-flops. The flip-flops are the 32×32 register file plus the output registers.

## Deviations from the published algorithms, and open points

The design follows the published algorithms for decode, encode, add/subtract selection, add, multiply, divide and square root. Where they are internally inconsistent, this RTL does the following.

- **Adder sign.** The selector computes the result sign. The adder listing later also assigns the sign of the first operand, which gives the wrong sign for `a - b` with `|b| > |a|`. The selector's sign is used.
- **Integer square-root correction.** The published final step adds `(Q<<2)|1` to a negative remainder. By then `Q` already includes the last root bit, so the value to add back is `(Q<<1)|1`. That value is used here, and `D = Q^2 + R` is checked exhaustively for small `D`.
- **Square-root exponent.** The published formula halves the regime and the exponent separately, with a parity fix on the exponent. That is wrong when the regime is odd. This RTL halves the total scale instead. For even regimes the two agree.
- **Quoted ranges.** The text quotes ranges that do not match standard posits:
  - Posit(8,1): minimum 2^-10, maximum 2^9 (also called "192");
  - Posit(16,2): 2^-48 to 2^47;
  - Posit(32,3): 2^-216 to 2^215.

  The encoding used here, and the text's own 8-bit table, give standard posit limits instead: Posit(8,1) spans 2^-12 to 2^12 (`0x01` is 2.44e-4), Posit(16,2) spans 2^±56 and Posit(32,3) spans 2^±240. The RTL follows the encoding.

Some points are left open by the published description and are this design's own choice:

- the operation latency and issue interface;
- how fused multiply-add rounds (twice here; there is no quire, on purpose);
- rounding modes, which are honoured only for conversions to integer;
- conversion of NaR and out-of-range values to integers;
- `fclass` bit assignment;
- the internal field widths.

Not built:

- the surrounding Rocket core, caches and memory;
- an IEEE-754 ⇄ posit converter on the load/store path. That is an alternative in which memory holds IEEE floats. It loses accuracy and speed, and the posit-native approach (programs store posit bit patterns directly) is the one this unit is built for.

## Verification

Every module has a self-checking testbench in `tb/`, named `tb_<module>.sv`. Each prints `TB_RESULT checks=N failures=M`.

**The reference model.** The expected values come from `tb/posit_ref_pkg.sv`, a bit-level posit model written independently of the RTL. It follows the posit definition directly:

- it decodes by walking bits;
- it holds values as a sign, a big integer and a power of two;
- it rounds by building the posit bit string bit by bit.

**The unit harness.** `tb/posit_op_chain.sv` strings decoder → unit → normaliser → encoder together, so each arithmetic unit is checked as a complete rounded operation:

- exhaustively over all Posit(8,1) operand pairs;
- on random and corner-case operands at Posit(16,2) and Posit(32,3).

**Whole-unit tests.**

- `tb_posar` runs the whole unit at its default Posit(32,3) size. It runs directed cases and 20,000 random instructions, reads every result back with `fsw`, and checks the one-cycle latency. It also counts mechanisms and fails if any never happens: NaR and zero inputs, division by zero, square root of a negative number, saturation to `maxpos` and `minpos`, rounding up, operand swap, cancellation, fused operations, conversions and compares.
- `tb_posar_matmul` multiplies two 182×182 matrices at Posit(32,3), the largest size that fits the 512 kB memory of a small RISC-V board. It streams all 182³ fused multiply-adds through the unit with `flw`/`fmadd`/`fsw`. Every element must be within a relative error of 1e-5 of a double-precision product, and every 7th row and column must match the bit-level model exactly.
- `tb_posar_series` runs four numerical-series programs as F-instruction sequences at all three sizes and checks the results bit-exactly against the model. The programs are Euler's number (N = 20), Nilakantha π (200 terms), sin(1) (10 Taylor terms) and Leibniz π (2,000,000 terms). The Posit(32,3) results are 2.7182817, 3.1415922 and 0.84147098, with 6, 6 and 8 exact fraction digits. Posit(8,1) gives e = 2.625, the posit nearest below e. Leibniz reaches 3.1415893 (4 digits) with the straightforward loop. Its accuracy depends on how the sum is written.

To run one testbench with Verilator 5 (example):

    verilator --binary --timing -Irtl -Itb rtl/posar_pkg.sv tb/posit_ref_pkg.sv \
        rtl/*.sv tb/posit_op_chain.sv tb/tb_posit_adder.sv --top-module tb_posit_adder
    ./obj_dir/Vtb_posit_adder

For `tb_posar_series`, also add `tb/series_runner.sv`. The packages must come first on the command line. Each testbench finishes in well under a minute except `tb_posar_series` (about one minute) and `tb_posar_matmul` (under two minutes).

## Changing the design

- **Posit size.** Set `PS` and `ES` on `posar` (`ES >= 1`). All widths follow from `posar_pkg`.
- **Pipelining.** Register the decoded fields or the unit outputs in `posar`. The unit boundaries are the natural cut points. The testbench's one-cycle latency check must then change.
- **Rounding modes.** Extend `posit_encoder`. At present it always rounds to nearest even.
