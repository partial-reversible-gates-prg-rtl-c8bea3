# A one-gate reversible BCD-to-excess-3 converter

A reversible circuit loses no information: every input vector produces a different output
vector, so the inputs can always be recovered from the outputs. Reversible designs are
judged on how few gates they use and how few *garbage outputs* they leave. Garbage outputs
are the extra outputs that exist only to keep the mapping one-to-one.

Excess-3 code is a decimal code in which each digit is stored as the digit plus 3. The
usual reversible way to convert BCD to excess-3 is a 4-bit reversible ripple adder that
adds 0011. Built from four full-adder gates, it costs 4 gates, 9 garbage outputs and 4
gate delays. This design replaces that adder with one 4-input, 4-output gate that is
reversible **only on the inputs a BCD converter can ever receive**. It is a *partial
reversible gate* (PRG). For BCD-to-excess-3 conversion it is a complete reversible
converter with 1 gate, 0 garbage outputs and 1 gate delay.

The RTL here describes that gate and the converter built from it. It follows the published
description of the PRG ("Partial Reversible Gates (PRG) for Reversible BCD Arithmetic",
Thapliyal, Arabnia, Bajpai and Sharma). The few choices that description leaves open are
marked below as this design's own.

## The PRG gate

The gate has inputs A, B, C, D and outputs P, Q, R, W. These are its equations, as
published:

| output | equation                 | same as           | role in excess-3 |
|--------|--------------------------|-------------------|------------------|
| P      | D'                       | NOT D             | bit 0 (LSB)      |
| Q      | CD + (C+D)'              | C XNOR D          | bit 1            |
| R      | B'(C+D) + B(C+D)'        | B XOR (C OR D)    | bit 2            |
| W      | A + B(C+D)               |                   | bit 3 (MSB)      |

When ABCD (A the MSB) is a BCD digit 0000..1001, `{W,R,Q,P}` equals ABCD + 3. These ten
inputs are the gate's **Sect-1**. The ten outputs, 0011..1100, are all different, so
within Sect-1 the gate is a bijection and is logically reversible.

The other six inputs, 1010..1111, form **Sect-2**. On these the same equations produce:

| ABCD | P Q R W | {W,R,Q,P} | also produced by |
|------|---------|-----------|------------------|
| 1010 | 1 0 1 1 | 1101      | none             |
| 1011 | 0 1 1 1 | 1110      | none             |
| 1100 | 1 1 1 1 | 1111      | none             |
| 1101 | 0 0 0 1 | 1000      | digit 5 (0101)   |
| 1110 | 1 0 0 1 | 1001      | digit 6 (0110)   |
| 1111 | 0 1 0 1 | 1010      | digit 7 (0111)   |

Three Sect-2 inputs share their output with a BCD digit, so over all 16 inputs the gate is
not reversible. That is what "partial" means here. The loss does not matter for this job:
a BCD digit never exceeds 1001, so a BCD converter never applies a Sect-2 input. On the
inputs it actually receives, the converter loses no information.

### Where the published truth table and equations disagree

The published gate comes as a symbol carrying the four equations above and as a 16-row
truth table. The two do not agree in two respects. This RTL follows the equations.

* **Column order.** In the Sect-1 rows, the table's columns headed P, Q, R, S hold the
  excess-3 code MSB first. Its "P" column is the equations' W, and its "S" column is the
  equations' P = D'. The table's fourth output is named S; the symbol names it W. The RTL
  uses the symbol's names, so `p` is the LSB and `w` the MSB.
* **Sect-2 row 1011.** The Sect-2 rows are listed in the symbol's P, Q, R, W order. Five of
  the six agree with the equations. For 1011 the table gives 0 0 1 1, but
  Q = CD + (C+D)' is 1 when C = D = 1, so the equations give 0 1 1 1. The RTL gives
  0 1 1 1. This affects only an input that a BCD converter never applies.

## The converter

`bcd_to_xs3` is the whole converter: one `prg` instance, wired as

```
bcd[3]=A  bcd[2]=B  bcd[1]=C  bcd[0]=D   ->   xs3[3]=W  xs3[2]=R  xs3[1]=Q  xs3[0]=P
```

Every gate output is used, so there are no garbage outputs. The circuit is combinational,
with no clock or reset. Its delay is one gate.

The converter contains an immediate assertion that its input is a BCD digit. This is the
design's own choice: it makes a simulation report any Sect-2 input, on which the converter
would no longer be reversible. Synthesis drops it. The published design has no port that
flags a non-BCD input, and none is added.

Costs of the two reversible converters (figures from the published comparison):

| converter                                   | gates | garbage outputs | gate delays |
|---------------------------------------------|-------|-----------------|-------------|
| 4-bit reversible adder adding 0011 (4 full-adder gates) | 4 | 9    | 4           |
| one PRG (this design)                       | 1     | 0               | 1           |

Only the PRG converter is built here. The adder-based converter serves only for
comparison, and the insides of its full-adder gate are not given in the PRG description.

## Files

| file                 | contents |
|----------------------|----------|
| `rtl/bcd_pkg.sv`     | package: the `bcd_digit_t` and `xs3_code_t` types, `BCD_MAX = 9`, and `is_bcd()` |
| `rtl/prg.sv`         | the partial reversible gate |
| `rtl/bcd_to_xs3.sv`  | the converter (the top module) |
| `tb/prg_tb.sv`       | applies all 16 inputs to the gate; checks Sect-1 against the truth table and against digit + 3, and Sect-2 against the table rows (with 1011 as above); checks that Sect-1 is one-to-one and that the full 16-input mapping is not |
| `tb/bcd_to_xs3_tb.sv`| end-to-end test of the converter at its only size: all ten digits and 200 random ones; checks digit + 3, recovery of the digit, and that no two digits share a code; counts each of these mechanisms |

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself after a fixed
simulated time in case it hangs. In the gate test, each output is sampled one time unit
after its input changes; that one unit stands for the gate's delay.

## Simulating

With Verilator 5, from the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/bcd_pkg.sv tb/bcd_to_xs3_tb.sv --top-module bcd_to_xs3_tb -o sim
./obj_dir/sim

verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/bcd_pkg.sv tb/prg_tb.sv --top-module prg_tb -o sim_prg
./obj_dir/sim_prg
```

Both run in well under a second. To lint the RTL:
`verilator --lint-only -Wall -Irtl -y rtl rtl/bcd_pkg.sv rtl/bcd_to_xs3.sv`.

## How far to trust it

* The gate's logic is the published equations, copied verbatim. Both testbenches check it
  exhaustively against values computed independently: the ten BCD digits plus 3, and the
  published truth table.
* Sect-2 behaviour follows the equations, not the one differing truth-table row (see
  above).
* Gate synthesis gives plain AND/OR/NOT logic. A synthesized PRG is ordinary irreversible
  CMOS logic with the PRG's truth table. Reversibility is a property of the mapping, which
  the tests check. This RTL does not model a reversible physical implementation.
* The published work gives no multi-digit converter, inverse (excess-3 to BCD) gate or
  other PRG gates, and none is added.
