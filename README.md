# 32-bit heterogeneous section-carry based carry lookahead adder

A carry lookahead adder (CLA) makes carries fast by computing them from
per-bit *generate* and *propagate* signals instead of waiting for them to
ripple. A conventional CLA block of m bits computes all m carries that way,
one lookahead equation per bit, and then forms every sum bit as
`P_i ^ C_i`. The section-carry based CLA (SCBCLA) keeps only the one
equation that matters for speed, the carry *out of the section*, and
produces the sum bits inside the section by ordinary rippling. Carries
therefore jump from section to section in two gate levels, while the
logic that would have produced the intermediate lookahead carries is gone.
A mapped 3-bit SCBCLA section is reported at about 55 % of the area of a
conventional 3-bit CLA block.

This repository gives synthesizable SystemVerilog for a 32-bit adder built
this way, in the partition reported as having the best power-delay-area
figure of merit among the CLA variants compared (heterogeneous conventional
and SCBCLA designs included):

```
 carry out                                                         carry in
   <-- [ 3-bit RCA ] <-- [3-bit SCBCLA] x 9 <-- ... <-- [ 2-bit RCA ] <--
        bits 31:29        bits 28:2                       bits 1:0
```

"Heterogeneous" means the lookahead sections are mixed with plain ripple
carry adders (RCA) at the two ends: at the bottom the carry has too little
distance to cover for lookahead to pay off, and the top bits only need to
produce their sum and the final carry out.

## The section (sub-SCBCLA)

`scbcla_section` (M bits, default 3) has three parts that all see the same
operand bits:

* **Propagate-generate logic** (`pg_logic`): `G_i = A_i & B_i`,
  `P_i = A_i ^ B_i`, one AND and one XOR per bit.
* **Section-carry generator** (`scb_carry_gen`): the section carry out as a
  single two-level sum of products. For M = 3

  ```
  C3 = G2 | P2&G1 | P2&P1&G0 | P2&P1&P0&C0
  ```

  For other M the module builds the same pattern: one AND term per bit j
  (`G_j` and every `P` above it), one term with all `P` and `C0`, one OR.
  Since `G_j` and `P_j` never hold together, the terms are mutually
  exclusive. No `C1`, `C2` are produced. That is the whole difference
  from a conventional generator.
* **Sum logic** (`scb_sum_logic`): `C0` ripples through full adders at bits
  0 .. M-2. The top bit is a 3-input XOR of `A`, `B` and the rippled carry,
  because its carry out would duplicate `C3` and is not needed.

The two paths run in parallel. The generator's output leaves for the next
section while the section's own ripple is still settling. So the critical
path of the 32-bit adder is: the low RCA, then nine two-level section
carries, then the ripple inside the final section or the top RCA.

## The 32-bit adder

`scbcla32_hetero` chains `rca #(2)`, nine `scbcla_section #(3)` and
`rca #(3)`. The carry out of each part is the carry in of the next. The
partition is set by four parameters whose defaults come from `scbcla_pkg`:

| parameter      | default | meaning                                  |
|----------------|---------|------------------------------------------|
| `LSB_RCA_BITS` | 2       | full adders below the first section      |
| `SECTION_BITS` | 3       | bits per SCBCLA section                  |
| `NUM_SECTIONS` | 9       | number of SCBCLA sections                |
| `MSB_RCA_BITS` | 3       | full adders above the last section       |

The operand width is their sum, `2 + 9*3 + 3 = 32`. Every part must have
at least one bit; elaboration stops with an error otherwise. All sections
share one size. A partition that mixes 2-bit and 3-bit sections needs a
different top, though `scbcla_section #(.M(2))` itself works and is tested.

Ports: `a`, `b` (W bits), `cin`, `sum` (W bits), `cout`. Tie `cin` to 0
for plain two-operand addition.

## Timing and clocking

The adder is purely combinational: there is no clock, reset or register.
"Synchronous" here only sets it apart from self-timed (handshaking)
adders. It is meant to sit between registers of a clocked design. The
evaluation this design follows applied one new operand pair every 5 ns
(200 MHz). The end-to-end testbench does the same and samples the result
4 ns after each change. Real timing is a matter of synthesis; the
reported post-mapping critical path in a 32/28 nm library is about
2.2 ns.

## What follows the published design and what does not

Taken from the published design:
* the generate/propagate equations;
* the two-level section-carry equation;
* full-adder ripple inside a section with a 3-input XOR at its top bit;
* the 2 / 9x3 / 3 partition.

This implementation's own choices:
* The full adder is written as `s = a^b^ci`, `co = g | p&ci`. A
  standard-cell flow would map it to a full-adder cell.
* The runs of full adders at either end are grouped into one `rca`
  module.
* The carry input and carry output are ports, and the partition is
  parameterised.
* `scb_carry_gen` extends the 3-bit equation to any M.

Not included:
* The conventional CLAs and other SCBCLA partitions that the design was
  compared against.
* Any technology mapping: cell choice, drive strengths and
  the 4-fanout output load belong to synthesis.

## Files

| file | contents |
|------|----------|
| `rtl/scbcla_pkg.sv` | default partition constants, width function |
| `rtl/full_adder.sv` | 1-bit full adder |
| `rtl/pg_logic.sv` | propagate/generate signals of an M-bit section |
| `rtl/scb_carry_gen.sv` | section-carry lookahead generator |
| `rtl/scb_sum_logic.sv` | ripple sum logic of a section |
| `rtl/scbcla_section.sv` | one M-bit SCBCLA section |
| `rtl/rca.sv` | N-bit ripple carry adder |
| `rtl/scbcla32_hetero.sv` | the 32-bit adder (top) |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Verification

Every testbench checks against integer addition computed in the
testbench. Each one prints `TB_RESULT checks=N failures=M` and has a
watchdog.
* The leaf testbenches are exhaustive. Section, generator, sum logic and
  RCA are tested at both size 3 and size 2. The generator is also
  compared term by term with the 3-bit equation above.
* `tb_scbcla32_hetero` runs the top at its default parameters. It applies
  28 directed vectors (zero, all ones, carries that run the full width,
  a generate in each section). It then applies 2000 `$urandom` vectors,
  half of them biased towards whole sections that propagate. Along the
  way it counts, and requires at least once each:
  * a section carry created by a generate term;
  * a carry passed through all three bits of a section;
  * a carry out of the low RCA;
  * a carry out of the whole adder;
  * a set carry input.

To run one testbench with Verilator:

```
verilator --binary --timing --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/scbcla_pkg.sv tb/tb_scbcla32_hetero.sv --top-module tb_scbcla32_hetero
./obj_dir/Vtb_scbcla32_hetero
```

To try another partition, override the top's parameters, for example
`scbcla32_hetero #(.NUM_SECTIONS(5)) u_add (...)` gives a 20-bit adder.
The testbench uses the package defaults, so change those there (or in
`scbcla_pkg`) to match.
