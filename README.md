# A posit arithmetic unit for a RISC-V execute stage

Posits are a proposed replacement for IEEE 754 floating point. An n-bit posit
spends its bits where values are most common: near magnitude 1 it has more
fraction bits than a float of the same width, and far from 1 it trades fraction
bits for range. The publication "Brightening the Optical Flow through Posit
Arithmetic" (Saxena et al., 2021) studies the Lucas-Kanade optical-flow method.
It finds that 16-bit posits with two exponent bits, (16,2), give about three
times lower error than 16-bit floats on synthetic images, provided the pixels
are scaled into the range around 1 (divided by 16). Its hardware part removes
the floating-point unit from the RI5CY core of the PULPino platform and puts a
posit arithmetic unit (PAU) in its place.

This repository is a SystemVerilog model of that PAU. It adds, subtracts and
multiplies posits, converts integers to posits (int2pos) and posits to integers
(pos2int). It is parameterised in the posit width `N` and exponent size `ES`.
The default is the integrated configuration, (16,2), with 32-bit operands and
results. The main idea of the structure is that the arithmetic units never round. Each
one hands an exact, or exactly-sticky, sign/exponent/fraction triple to a
single shared normalizer, which does all the rounding and encoding.

## Posit numbers in brief

An (N,ES) posit is read as a two's-complement integer. Zero is all zeros. The
pattern `1000...0` is NaR ("not a real"), the single exception value. Any other
pattern is negated if negative, and the remaining N-1 bits are read left to right:

| field    | length                     | meaning                                             |
|----------|----------------------------|-----------------------------------------------------|
| regime   | run of equal bits + 1 stop | a run of m ones gives k = m-1; a run of m zeros gives k = -m |
| exponent | up to ES bits              | e; bits cut off at the right end count as 0         |
| fraction | whatever is left           | f, with a hidden leading 1                          |

The value is `(-1)^s * 2^(k*2^ES + e) * 1.f`. In this design `k*2^ES + e` is
called the *scale*. For (16,2): maxpos = 2^56, minpos = 2^-56, and values in
[1/16, 16) carry 11 fraction bits, or 12 significant bits.

## Datapath

```
 op_i ──► pau_op_decoder ──────────── control word (pau_ctrl_t) to every block
                                    │
 operand_a_i ─┐               ┌──► int_posit_converter ─┬─ sign/scale/frac ─┐   signed integer
 operand_b_i ─┴► pau_operand_ ├──► posit_multiplier ────┼─ sign/scale/frac ─┤──────────┐
                 demux        └──► posit_adder ─────────┴─ sign/scale/frac ─┤          │
                                                                  pau_unit_mux         │
                                                                         │             │
                                                              posit_normalizer         │
                                                                         │ posit       │
                                                                  pau_result_mux ◄─────┘
                                                                         │
                                                                      result_o
```

This follows the posit-core block diagram of the publication: a decoder on
the control path, a demultiplexer feeding three units (I2P/P2I, MULTIPLIER,
ADD/SUB), a multiplexer collecting their sign, exp and frac outputs, one
NORMALIZATION block, and an output multiplexer. The output multiplexer also
receives the signed integer that pos2int produces without normalization.
Everything is combinational. The publication states that its adder and
multiplier have no pipelining, so the result is valid in the cycle the
operands are applied.

| `op_i` | operation | operands              | `result_o`                             |
|--------|-----------|-----------------------|----------------------------------------|
| 0      | add       | posit A, posit B      | A+B, posit sign-extended to 32 bits    |
| 1      | sub       | posit A, posit B      | A-B                                    |
| 2      | mul       | posit A, posit B      | A*B                                    |
| 3      | int2pos   | 32-bit signed integer A | posit nearest to A                   |
| 4      | pos2int   | posit A               | nearest integer, ties to even, saturating; NaR gives 0x80000000 |
| 5-7    | illegal   |                       | 0, and `illegal_op_o` = 1              |

Posit operands are taken from the low N bits of the 32-bit operands. Posit
results are sign-extended. A register then holds a posit as a 32-bit integer
of the same order, so integer compare instructions also order posits.
`round_up_o` and `clamp_o` only report what the normalizer did, for tests and
debugging.

## The unrounded bundle

Each unit's output, and the normalizer's input, is five signals (`posit_pkg`
documents them):

- `nar`, `zero`: special results, passed straight through.
- `sign`.
- `scale`: signed, `SW` bits.
- `frac`: `FW` bits with two integer bits, so the value is
  `frac * 2^(scale - (FW-2))`. The fraction need not be normalized: it may be
  in [2,4) after an addition or a product, or have leading zeros after a
  cancellation or for a small integer.

`FW = max(2*(N-3-ES)+4, INT_W) + 2`. The field holds the exact product of two
significands, a whole 32-bit integer, or an aligned sum with spare guard bits.
`SW` covers twice the largest scale plus the normalization shift. At the
defaults FW = 34 and SW = 10.

## Where rounding happens: `posit_normalizer`

1. A leading-zero count normalizes the fraction, and the scale becomes
   `s = scale + 1 - lz`.
2. `k = s >> ES` (floor) and `e = s mod 2^ES`.
3. The pattern is made by an arithmetic right shift of `{10, e, fraction}` by `k`
   when k >= 0, or of `{01, e, fraction}` by `-k-1` when k < 0. The shift copies
   the first bit into a run of the right length and leaves the regime's stop bit
   behind it.
4. The upper N-1 bits are the magnitude. The next bit is the guard bit and the
   OR of the rest is the sticky bit. Round to nearest, ties to even, acts on
   this bit string. When a long regime pushes the exponent partly out of the
   word, the cut falls inside the exponent and the rounding still works, because
   posit patterns are ordered like their values.
5. A regime beyond k = N-2 gives maxpos, and one below -(N-2) gives minpos. A
   posit result never overflows to NaR and a nonzero result never underflows to
   zero. A negative result is the two's complement of the rounded magnitude.

## The units

**posit_multiplier.** It decodes both operands (`posit_unpack`: negate, count
the regime run with `posit_lzc`, shift out the regime, read e and f). It adds
the scales, XORs the signs and multiplies the (N-2-ES)-bit significands exactly.

**posit_adder.** It flips B's sign for a subtraction, orders the operands by
magnitude and shifts the smaller significand right by the scale difference.
It then adds or subtracts in the FW-bit field. Bit 0 of the field is left
empty by both significands; every bit shifted out is ORed into it. Take r', the
computed result in units of bit 0. When nothing is lost r' is exact. When
something is lost, r' is odd and the true result lies strictly within one unit
of it. Every point where the rounding decision changes is a multiple of at
least 8 units, because many guard bits sit between the rounding position and
bit 0. So the true result and r' always round the same way, for addition and
for subtraction alike. An exact cancellation gives zero.

**int_posit_converter.** int2pos places |A| at the top of the fraction field
with scale 30, and the normalizer rounds it. pos2int shifts the significand
into integer position, rounds to nearest even, and saturates at ±2^31. It
sends the integer straight to the output multiplexer.

**pau_op_decoder, pau_operand_demux, pau_unit_mux, pau_result_mux.** These are
the control path and the multiplexers. The demultiplexer drives zeros into the
idle units, so only the active unit's inputs toggle.

## Departures from the publication and choices made here

The publication gives the block diagram, the operations, the configurations and
FPGA results. It does not describe the insides of the units. It reuses the RI5CY
core, and it takes its divider from an earlier generator (PACoGen). Therefore:

- The decode, alignment, normalization and rounding methods above are this
  design's own. The rounding rules (nearest-even on the bit string, saturation
  at maxpos/minpos, nonzero never rounding to zero) are the common posit
  convention, not stated in the publication. The same holds for pos2int's
  saturation and its NaR code.
- The diagram prints only sign, exp and frac between the units and the
  normalizer. Zero and NaR flags travel with them here. The diagram's "exp" is
  the combined scale here.
- The diagram shows OpA and OpB entering I2P/P2I. Both conversions are unary,
  so only Operand A is routed to that unit.
- The operation codes, the 32-bit operand width, the sign extension of results
  and the zero result for illegal codes are this design's choices.
- Widths: the publication says both that a 32-bit adder and multiplier were
  generated for the integration and that a (16,2) unit was integrated. Its
  conclusion mentions 16,1 and 32,2. The default here is (16,2), the
  configuration the optical-flow study selects. N and ES are parameters
  (ES+4 <= N <= 32).
- Not included: the posit divider, which Lucas-Kanade needs for the last step
  of Cramer's rule; the RI5CY core itself (prefetch buffer, decoder, register
  file, ALU, CSR, multiplier, dot-product unit, load/store unit, pipeline
  registers); the decoding of posit instructions in that core; and the quire,
  which the publication leaves out of scope. The ports of `posit_core` are the
  signals the execute stage would drive and read.
- The FPGA figures of the publication (LUT counts, delays) are not reproduced.

## Verification

The testbenches compare against `tb/posit_ref_pkg.sv`, a reference written
independently of the RTL. It decodes posits bit by bit into `real` values,
computes in double precision, and rounds by binary search over the ordered
posit patterns. A value is compared with the (N+1)-bit pattern `{lower
neighbour, 1}`, the midpoint in the bit string. This reference is exact for
N <= 16.

| testbench                    | what it checks                                                                 |
|------------------------------|--------------------------------------------------------------------------------|
| `tb_posit_core`              | whole unit at defaults (16,2): directed corners and 20000 random cases per operation; counts and requires NaR, zero operands, cancellation, rounding up, ties, maxpos/minpos saturation, pos2int saturation, illegal codes |
| `tb_posit_core_exhaustive8`  | (8,0) and (8,2): every operand pair for add/sub/mul, every posit for pos2int   |
| `tb_posit_core_configs`      | (10,2) exhaustive, (16,1) 300000 random cases                                  |
| `tb_posit_core_es2_sweep`    | (7,2), (9,2), (11,2) exhaustive, 13.4 million cases                            |
| `tb_posit_core_32`           | (32,2) and (28,2), random cases the double-precision reference can hold exactly |
| `tb_luka_flow`               | Lucas-Kanade arithmetic on two generated 14x14 frames, 5x5 windows, norm 16: 22270 unit operations checked bit for bit; the flow differs from a double-precision run by at most 0.0015 pixel |
| `tb_posit_normalizer`        | random bundles over scales ±80, including ties and saturation                   |
| `tb_posit_adder`, `tb_posit_multiplier` | bundle value equals the exact sum/product (adder: within the sticky unit) |
| `tb_int_posit_converter`     | pos2int for all 65536 (16,2) posits, int2pos for corner and random integers     |
| `tb_pau_op_decoder`, `tb_pau_operand_demux`, `tb_pau_unit_mux`, `tb_pau_result_mux` | control word, routing, selection |

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and has a clock
watchdog. The publication tested exhaustively at (8,0) and (7..12,2) and
covered 31% of (16,1). Here every configuration except (12,2) is covered
exhaustively or at random. For (28,2) and (32,2) the reference is exact only
when a result fits in 53 bits. The multiply operands are therefore limited to
26 significant bits, and additions whose double-precision sum is inexact are
skipped (about 1%).

To run one with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/posit_pkg.sv tb/posit_ref_pkg.sv tb/tb_posit_core.sv \
    --top-module tb_posit_core -Mdir obj_tb_posit_core
./obj_tb_posit_core/Vtb_posit_core
```

Most testbenches finish in about a second. `tb_posit_core_configs` takes about
ten seconds and `tb_posit_core_es2_sweep` about forty.

## Changing the configuration

Override `N` and `ES` (and `INT_W`, the operand width) on `posit_core`. Every
internal width follows from `posit_pkg::bundle_fw` and `posit_pkg::scale_w`.
ES = 0 is supported. An elaboration-time check rejects N < ES+4 or N > INT_W.
To add an operation, give it a code in `pau_op_e`, a row in `pau_op_decoder`,
and a unit that emits the bundle. The normalizer rounds for it.
