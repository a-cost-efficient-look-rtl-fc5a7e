# A LUT-based BCD adder with a parallel per-digit correction

A BCD adder adds two decimal numbers stored as 4-bit digits (0..9). The
textbook version adds each digit in binary. It then compares the result with
9 and, if it is larger, adds 6. That is two carry-propagating 4-bit additions
in series inside every digit. This design removes both of them from the digit.
It adds every bit position independently. A single level of 6-input look-up
tables then produces the corrected upper three bits and the decimal carry. A
second, LUT-free path covers the one case the LUTs are not used for. The
digits are then chained by their decimal carries into an N-digit adder.

The RTL is combinational throughout: there is no clock, no register and no
handshake. `bcd_adder` is the top and `DIGITS` (default 32) sets its width.

## Why the upper three bits can be handled on their own

Write a digit sum as `T = A + B + Cin`, with `A = A3A2A1A0` and
`B = B3B2B1B0`. The first level works on each bit position by itself:

* bit 0 goes to a full adder: `S0 = A0 ^ B0 ^ Cin`, `C0 = carry(A0, B0, Cin)`;
* bits 1..3 go to half adders: `Sα_i = A_i ^ B_i`, `C_i = A_i & B_i`.

Each carry weighs twice its own bit. Collecting terms gives

    T = S0 + 2 * ( C0 + Sα1 + 2*(C1 + Sα2) + 4*(C2 + Sα3) + 8*C3 )
      = S0 + 2 * ( F + 8*C3 ),      F = {Sα3,Sα2,Sα1} + {C2,C1,C0}

Two facts follow from this:

1. **S0 is already final.** Correcting a BCD digit means adding 6, which is
   even, so bit 0 never changes. The full adder's sum bit is the output's bit 0.
2. **The correction works on F alone.** When `C3 = 0`, `T = 2F + S0`, so
   `T >= 10` exactly when `F >= 5`. Adding 6 to T is then the same as adding
   3 to F. The 4-bit value `F >= 5 ? F + 3 : F` is the digit's
   `{Cout, S3, S2, S1}`. Its top bit becomes the decimal carry, because
   `2*(F+3) + S0 - 16 = T - 10`.

The case `C3 = 1` (A3 = B3 = 1) is left over. For valid BCD digits it means
both digits are 8 or 9. Then `T = 16 + S0 + 2*C0`, so the output digit is
`T - 10 = 6 + S0 + 2*C0` and there is always a carry:

    Cout = 1,  S3 = C0,  S2 = S1 = ~C0

This path needs no arithmetic, only C0 and its complement.

Two worked examples:

| operands | level 1 | path | result |
|---|---|---|---|
| 9 + 5, Cin 0 | Sα = 110, C = 0001, S0 = 0 | F = 6 + 1 = 7 ≥ 5, so 7 + 3 = 1010 | Cout,S = 1_0100 (14) |
| 8 + 9, Cin 1 | Sα = 000, C = 1001, S0 = 0 | C3 = 1, C0 = 1 | 1_1000 (18) |

## One digit: `bcd_digit_adder`

```
 A[3:0] B[3:0] Cin
    |      |    |
 +--v------v----v--------------------------------+
 | bitwise_addition                              |
 |   full_adder (bit 0)   half_adder x3 (1..3)   |
 +---+-------------+---------------+--------+----+
     | S0          | Sα[3:1],C[2:0] | C0     | C3
     |     +-------v--------+  +---v--------v--+
     |     | add3_correction|  | direct_logic  |
     |     | 4 x lut6       |  | 1, C0, ~C0    |
     |     +-------+--------+  +-------+-------+
     |        gamma|              beta|
     |           +-v-------------------v-+
     |           | output_selection (C3) |
     |           +-----------+-----------+
     v                       v
    S[0]            {Cout, S[3:1]}
```

| module | role |
|---|---|
| `half_adder`, `full_adder` | first level, one bit position each |
| `bitwise_addition` | the four adders of the first level side by side |
| `lut6` | a 6-input LUT, output = `INIT[address]` |
| `add3_correction` | `C3 = 0` path: four `lut6`, one per output bit |
| `direct_logic` | `C3 = 1` path |
| `output_selection` | four 2-to-1 switches controlled by C3 |
| `bcd_digit_adder` | the digit, wired as above |
| `bcd_adder` | `DIGITS` digits, carry chained |
| `bcd_pkg` | digit and result types, the correction rule, LUT contents |

### The four LUTs

All four LUTs share the same six inputs. The address order, from bit 5 down
to bit 0, is

    {Sα3, C2, Sα2, C1, Sα1, C0}

Each pair (Sα_i, C_{i-1}) has the same weight in F. LUT k gives bit k of
`correct3(Sα, C) = (F >= 5) ? F + 3 : F`, kept to four bits. k = 0 gives S1,
k = 1 gives S2, k = 2 gives S3 and k = 3 gives Cout. The contents are computed
during elaboration by `bcd_pkg::lut_init()`; they are not typed in by hand.
For reference, they come to:

| LUT | output | INIT |
|---|---|---|
| 0 | S1 | `64'h9999_9998_9998_8666` |
| 1 | S2 | `64'h1EE1_1EE0_1EE0_0778` |
| 2 | S3 | `64'h1FFE_E001_E001_1880` |
| 3 | Cout | `64'h1FFF_FFFE_FFFE_E000` |

`lut6` uses the indexing of the Xilinx LUT6 primitive (`O = INIT[I]`), so
these values can be placed on such a device unchanged. The address bits map
to `I5..I0` in the order given above.

### The two second-level paths, and what they see when idle

In the transistor-level circuit this design follows, the six LUT inputs reach
the LUTs through switches that conduct only while C3 = 0. The outputs of the
direct path are likewise driven only while C3 = 1. The node on the idle side
floats. A two-state model needs a value there, so this RTL drives it to 0:

* the LUT address is forced to 0 while C3 = 1;
* `beta` is 0 while C3 = 0.

Neither choice shows at the digit outputs, because `output_selection` takes
the other path at those times. For an FPGA mapping, both gates can be dropped.

## N digits: `bcd_adder`

Digit i takes operand bits `[4i+3:4i]`; digit 0 is the least significant.
The `cout` of digit i is the `cin` of digit i+1. The top-level `cin` feeds
digit 0 and is normally tied to 0. The top-level `cout` is the decimal carry
out of the most significant digit.

**Timing.** Inside a digit, the path from `cin` to `cout` passes through the
full adder, one LUT and one output switch. Across digits the carry ripples,
so the worst-case delay grows linearly with `DIGITS`. Operands such as
99…9 + 00…0 with `cin = 1` exercise the whole chain. The design has no
pipeline or carry look-ahead between digits. The parallel work happens inside
each digit: the old "binary add, then +6" chain becomes one level of adders
followed by one LUT.

**Size.** Each digit uses one full adder, three half adders, four 6-input
LUTs, the C3 path and four 2-to-1 switches. The total is therefore 4·DIGITS
LUTs, or 128 for the default of 32 digits.

## Operands outside 0..9

The adder is specified for BCD digits only. Two cases apply when a digit is
above 9:

* With C3 = 0, the result is still the correct decimal digit and carry as
  long as `A + B + Cin <= 19`. Examples: 5 + 13 gives 1_8, and 6 + 10 gives
  1_6.
* When both high bits are set and an operand is above 9 (say 12 + 12), the
  direct path assumes 16..19 and the result is wrong.

F + 3 is kept to 4 bits; it only overflows for sums of 26 or more.

## How this RTL settles points the original description leaves open

The adder is built from a published description of the circuit (algorithm,
equations, truth tables and a transistor/LUT schematic). Some points in that
description disagree with each other. This RTL settles them as follows:

* **Carry of bit 0.** One pseudo-code line computes C0 as `A0·B0·Cin`. The
  text calls the block a full adder, and the 8 + 9 + 1 example needs C0 = 1.
  A real full adder (majority) is used.
* **LUT inputs.** One listing gives them as `{Sα3, Sα2, Sα1, C3, C2, C1}`.
  The equations and the schematic use `{Sα3, C2, Sα2, C1, Sα1, C0}`, the set
  that matches the arithmetic, and that set is used here.
* **Truth tables.** The published per-LUT truth tables contain rows that
  contradict their own intermediate column. For example, 0 + 2 with C0 = 1
  is listed with output 0000. The LUT contents here are therefore computed
  from the correction equation, not copied from those tables.
* **Direct path inputs.** A block diagram labels the inputs of the direct
  path "1 1 C0 0". The equations and schematic give Cout = 1, S3 = C0,
  S2 = S1 = ~C0, and those are used.
* **Adder width.** The description is for any N. Its evaluation uses 1, 2,
  4, 8, 16 and 32 digits. `DIGITS` defaults to 32, the largest of these.
* **Transistor level.** The schematic's pass transistors, transmission-gate
  multiplexers and inverters appear here as logic: the idle-path gating
  described above and plain multiplexers. This RTL says nothing about the
  transistor counts or delays quoted for that circuit.

The claimed time complexity O(N·log2 b + (N−1)) describes the depth of the
per-digit tree plus a ripple across digits. That matches the structure here:
constant depth per digit, linear in N overall.

## Verification

Each module has a self-checking testbench in `tb/`. Expected values come
from integer arithmetic in the testbench, not from the design's own
functions:

| testbench | what it covers |
|---|---|
| `half_adder_tb`, `full_adder_tb` | all input combinations |
| `bitwise_addition_tb` | all 512 inputs; each bit position, and the weighted sum back to A+B+Cin |
| `lut6_tb` | every address of an irregular pattern |
| `add3_correction_tb` | all 128 input combinations, both C3 values, the 9+5 example |
| `direct_logic_tb` | all four inputs |
| `output_selection_tb` | all 512 inputs |
| `bcd_digit_adder_tb` | all 200 BCD inputs, the two worked examples, and the three out-of-range vectors above |
| `bcd_adder_tb` | 32 digits at default parameters: directed carry-ripple cases plus 2000 random additions. It counts direct-path digits, corrected digits, uncorrected digits, carries into a digit, carries out of the top and full-length ripples, and fails if any of these never occurs. |
| `bcd_adder_sizes_tb` | the widths 1, 2, 4, 8, 16 and 32 digits, 502 additions each (helper `bcd_adder_size_check`) |

Each testbench ends by printing `TB_RESULT checks=<n> failures=<m>`. Each has
a watchdog. Every module was also checked against a deliberately broken copy:
a wrong carry, a swapped LUT address bit, an inverted select and the like. In
every case its testbench reported failures.

To run a testbench with Verilator:

    verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
        rtl/bcd_pkg.sv tb/bcd_adder_tb.sv --top-module bcd_adder_tb
    ./obj_dir/Vbcd_adder_tb

Replace `bcd_adder_tb` with the name of any other testbench. To lint the
design:

    verilator --lint-only -Wall -Irtl -y rtl +libext+.sv rtl/bcd_pkg.sv rtl/bcd_adder.sv

## Changing it

* **Width.** Set `DIGITS` on `bcd_adder`. Widths 1 to 32 have been
  simulated.
* **Correction rule.** Edit `bcd_pkg::correct3()`; the LUT contents follow
  automatically. The LUT address order is set in two places, which must
  agree: `lut_init()` and the `lut_in` concatenation in `add3_correction`.
* **FPGA mapping.** To map onto a device, replace the body of `lut6` with
  the vendor's LUT6 primitive; its `INIT` parameter has the same meaning.
