# CIFM: a combined integer and floating-point multiplier built from 4x4 cells

FPGAs usually offer 18x18 hard multipliers. A single-precision floating-point
multiply needs a 24x24 product of the two significands (23 fraction bits plus
the hidden 1), so an 18x18 block is either too small or has to be combined with
others. The CIFM (Combined Integer and Floating-point Multiplier) architecture
of Thapliyal, Arabnia and Vinod replaces the 18x18 hard block by a 24x24 one
that serves integer and floating-point multiplication alike. The 24x24 block is
not one big array: it is 36 small 4x4 multipliers working in parallel. That
fine granularity buys two run-time features:

* **Reconfiguration for power.** Checkers look at the operands. When an operand
  is short (its upper 12 bits, or its upper 4 or 8 bits within a 12-bit half,
  are zero), the 4x4 cells that would only multiply zeros are switched off.
* **Self-repair.** Each group of nine cells has one spare 4x4 multiplier. A
  repair request names a faulty cell; that cell is switched off and the spare
  computes its product instead.

The same architecture is also given as reversible logic, with the TSG gate as
the full adder and the New Gate (NG) as the half adder. This RTL contains both
builds, selected by one parameter.

All of the design is combinational: there is no clock, no register and no
reset. A result is valid one propagation delay after the inputs change.

## Hierarchy

```
cifm_top                      mode mux, shared output
├── fp_mul                    sign, exponent, normalise, round (single precision)
└── cifm24                    24x24 block: A = {AH, AL}, B = {BH, BL}
    ├── group_checker x2      is AH / BH non-zero?
    ├── mult12x12 x4          AL*BL, AL*BH, AH*BL, AH*BH
    │   ├── group_checker x2  is the operand 4, 8 or 12 bits long?
    │   ├── mult4x4 x9        (rev_mult4x4 in the reversible build)
    │   └── repair_unit       select/enable logic + spare mult4x4
    ├── adder2                product bits 12..35 and a 2-bit carry
    └── adder1                product bits 36..47
```

`cifm_pkg` holds the shared types (`mode_e`, `repair_t`) and sizes. `half_adder`,
`full_adder`, `tsg_gate`, `ng_gate`, `rev_csa`, `rev_ripple_adder` and `rev_csa_sum`
are the leaf cells and adders.

## The dedicated 4x4 multiplier (`mult4x4`)

This is the cell everything else is made of, and the part whose wiring takes
the most care to follow. The 16 partial products `XiYj` (weight 2^(i+j)) are
added by eight small parallel adders arranged in three levels. Each adder
block handles two or three neighbouring columns; the blocks of one level work
at the same time.

| level | block | cells (left to right = high to low column) | inputs | outputs |
|---|---|---|---|---|
| 1 | 1 | FA, HA | col 2: X2Y0, X1Y1, carry of the HA; col 1: X1Y0, X0Y1 | P1, s2, carry c3 |
| 1 | 2 | HA, HA | col 4: X3Y1 + carry; col 3: X3Y0, X2Y1 | s3, s4, carry c5 |
| 1 | 3 | FA, HA | col 4: X2Y2, X1Y3 + carry; col 3: X1Y2, X0Y3 | t3, t4, carry tc5 |
| 1 | 4 | HA, HA | col 6: X3Y3 + carry; col 5: X3Y2, X2Y3 | t5, t6, carry tc7 |
| 2 | 5 | FA, FA, HA | col 4: s4, t4, k4; col 3: s3, c3, k3; col 2: s2, X0Y2 | P2, u3, u4, carry k5 |
| 2 | 6 | FA | col 5: c5, tc5, t5 | u5, carry k6 |
| 3 | 7 | HA, HA | col 4: u4 + carry; col 3: u3, t3 | P3, P4, carry m5 |
| 3 | 8 | HA, FA, FA | col 7: tc7 + carry; col 6: k6, t6 + carry; col 5: k5, u5, m5 | P5, P6, P7 |

P0 is X0Y0 directly. Blocks 1 and 2 add partial-product rows Y0 and Y1, blocks
3 and 4 rows Y2 and Y3, two bits at a time; level 2 merges the carries of
level 1 with the sums, and level 3 finishes the carry propagation. The kinds
of adder in each block and the operands of level 1 are those of the original
drawing. Which sum or carry travels on each line between the levels is not
spelled out there; the assignment above is one that uses exactly the drawn
cells (10 half adders, 7 full adders) and sums every column once. All 256
input pairs are checked.

The original proposal also powers only the level that is currently
computing. That is a supply-switching technique with no logic function, and it
is not modelled.

## Run-time reconfiguration (`group_checker`)

A checker splits its operand into groups and reports which groups lie inside
the operand's length: `active[i]` is the OR of every bit from group `i`
upwards, and the lowest group is always active.

* In `cifm24`, a 2 x 12-bit checker on A and one on B decide whether the
  modules that use AH or BH are needed. AL*BL is always on; AL*BH needs BH;
  AH*BL needs AH; AH*BH needs both.
* In every `mult12x12`, a 3 x 4-bit checker on each operand tells whether it
  is 12, 8 or 4 bits long. Cell (i, j) is powered when nibble Ai and nibble Bj
  are both inside the lengths and the module itself is on.

Switching a cell off is modelled as a power-enable bit: the cell's operands
are forced to zero and its output is clamped to zero. A cell is only switched
off when one of its operand nibbles is zero, so the product never changes; the
enables are visible on the `cell_on` and `red_on` outputs so that a testbench,
or a power estimate, can see them. A zero nibble in the middle of an operand
(for example A = 0x0F0) does not switch anything off: the checkers measure
length, not zero groups.

In floating-point mode the hidden bit makes the upper half of every normal
significand non-zero, so the whole 24x24 array is used; only zero, infinite and
NaN operands (whose significand is sent as zero) let the checkers turn the
block down to its single always-on cell.

## Self-repair (`repair_unit`, `mult12x12`)

Each 12x12 module has its own spare 4x4 multiplier, so the 24x24 block has
four. The repair request of a module is a `repair_t`:

| field | width | meaning |
|---|---|---|
| `en` | 1 | E: repair enable |
| `a_sel` | 2 | Aij: which A nibble (0 = A1 ... 2 = A3; 3 = none) |
| `b_sel` | 2 | Bij: which B nibble (0 = B1 ... 2 = B3; 3 = none) |

The A- and B-select logic decode the fields and steer the named nibbles into
the spare multiplier; with no request the spare gets zeros. The spare's
product is offered to all nine cell positions, and the one named by the
request takes it in place of its own output, while its own power enable drops.
Cells are numbered k = 3*i + j (A nibble i, B nibble j), and `cell_on` of the
24x24 block is indexed 9*m + k with m = 0 AL*BL, 1 AL*BH, 2 AH*BL, 3 AH*BH. The
field encoding is this implementation's choice; the original only says that
the cell is named by the bits Aij, Bij and E.

Fault detection is outside the design: something has to decide which cell is
broken and drive `rep`. Because the request is a plain input, a cell can be
repaired at any time, and it stays repaired for as long as the request is held.
One faulty cell per 12x12 module can be covered, i.e. up to four at once.

## The 24x24 block (`cifm24`, `adder1`, `adder2`)

With A = AH·2^12 + AL and B = BH·2^12 + BL,

    A·B = AH·BH·2^24 + (AH·BL + AL·BH)·2^12 + AL·BL

* P0..P11 are the low 12 bits of AL*BL.
* Adder 2 adds the high half of AL*BL, the two middle products and the low
  half of AH*BH, all aligned at bit 12. Its 26-bit result gives P12..P35 and
  two carry bits.
* Adder 1 adds those two carries to the high half of AH*BH, giving P36..P47.

The original names the two adders and draws two lines between them but shows
nothing of their insides. In the standard build they are plain behavioural
additions, which synthesis maps to whatever adder suits the target.

## Floating-point path (`fp_mul`)

`fp_mul` surrounds the 24x24 block, which does the significand product:

1. sign = sign A XOR sign B;
2. a first 8-bit adder sums the biased exponents, and a second one subtracts
   the bias, 127, or 126 when the product of the significands is 2 or more
   (a mux chooses the constant from the normalise decision);
3. `{1, fraction}` of each operand goes to the multiplier;
4. normalisation keeps the 24 bits under the leading one;
5. rounding is to nearest, ties to even (guard bit, sticky OR). If rounding
   overflows to 2.0 the exponent is incremented.

The original gives the sign, exponent and significand rules and the block
diagram (adders, mux, control, shifter, round), but no rounding mode and no
special values. This implementation chooses:

| case | result |
|---|---|
| zero or subnormal operand | treated as zero (flush to zero) |
| NaN operand, or infinity x zero | quiet NaN 0x7FC00000 |
| infinity x finite non-zero | signed infinity |
| exponent overflow | signed infinity |
| result below the normal range | signed zero (no subnormal results) |

No exception flags are produced.

## Reversible build (`REVERSIBLE = 1`)

Setting the parameter on `cifm_top` (or `cifm24`, `mult12x12`, `adder1`,
`adder2`, `repair_unit`) gives the reversible CIFM:

* Every 4x4 cell, including the spares, is `rev_mult4x4`: the same eight
  blocks with each full adder replaced by one TSG gate and each half adder by
  one New Gate (7 TSG + 10 NG per cell).
* The nine cell products of each 12x12 module are added by a chain of seven
  TSG carry-save rows and a 24-bit TSG ripple-carry adder (`rev_csa_sum`).
* Adder 2 becomes two rows of TSG carry-save adders and a 26-bit TSG
  ripple-carry adder; Adder 1 a 12-bit TSG ripple-carry adder.

The gates compute

    TSG: P = A, Q = A'C' ^ B', R = Q ^ D, S = Q·D ^ (AB ^ C)
         with C = 0, D = Cin: R = sum, S = carry, P and Q are garbage
    NG:  P = A, Q = AB ^ C, R = A'C' ^ B'
         with C = 0: Q = carry, R = sum, P is garbage

Garbage outputs stay as unused named nets. This is a logical model of the
reversible circuit: it is simulated and synthesised like any other
combinational logic. The reversible build is not reversible everywhere. The
partial products are made with AND gates, fan-out is free, and the checkers,
the repair muxes, the power-enable clamps and `fp_mul` are the standard logic
in both builds. The original only gives the reversible 4x4 multiplier and the
top-level picture. The structure of the reversible adders is this
implementation's choice.

## Interface of `cifm_top`

| port | dir | width | meaning |
|---|---|---|---|
| `mode` | in | `mode_e` | `MODE_INT` or `MODE_FP` |
| `a`, `b` | in | 32 | integer operands in bits 23:0 (unsigned), or single-precision floats |
| `rep` | in | 4 x `repair_t` | repair request per 12x12 module (AL*BL, AL*BH, AH*BL, AH*BH) |
| `prod` | out | 48 | integer product, or `{16'b0, float product}` |
| `cell_on` | out | 36 | power enable of each 4x4 cell, bit 9*m + 3*i + j |
| `red_on` | out | 4 | power enable of each spare multiplier |

| parameter | default | meaning |
|---|---|---|
| `REVERSIBLE` | 0 | 1 selects the TSG/NG build |

The block widths (24, 12, 4, nine cells, four modules) are the architecture's
own numbers and live in `cifm_pkg` as constants.

## Departures from the original description

* Integer operands are unsigned; signed multiplication is not described.
* How the nine 4x4 products of a 12x12 module are summed is not shown; a
  behavioural sum does it in the standard build, a TSG carry-save chain in the
  reversible one.
* Only the upper nibbles and the upper 12-bit half are checked, as the text
  says. The drawing of the 12x12 module shows a checker on every nibble; a
  checker on the lowest group could only add a switch-off for all-zero
  operands.
* The mode selection, the shared output bus, the status outputs `cell_on` and
  `red_on`, and the `repair_t` encoding are additions needed to make a usable
  block.
* Rounding mode and special-value handling are this implementation's
  choices (see the floating-point section).
* Supply switching (per cell, and per adder level inside a cell) is modelled
  only through its logical effect, the power-enable bits. The level switching
  inside a cell is not modelled at all.
* The synthesis results quoted in the original (VirtexE XCV300e: 3149 cells
  and 41.2 ns with reconfiguration, 2967 cells and 37.6 ns without) are for
  the authors' own Verilog and are not reproduced. No variant without
  reconfiguration is provided.

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and stops. The floating-point testbenches share
the reference model `tb/tb_fp_ref_pkg.sv`, which rounds by comparing the
discarded remainder with half an ulp, not with guard and sticky bits as the
RTL does. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/cifm_pkg.sv tb/tb_fp_ref_pkg.sv tb/tb_cifm_top.sv --top-module tb_cifm_top
./obj_dir/Vtb_cifm_top
```

Replace `tb_cifm_top` by any other testbench name. The main ones:

| testbench | what it shows |
|---|---|
| `tb_mult4x4`, `tb_rev_mult4x4` | all 256 products of the standard and reversible cell |
| `tb_tsg_gate`, `tb_ng_gate` | gate equations, adder use, one-to-one mapping |
| `tb_group_checker` | all 4096 12-bit operands |
| `tb_repair_unit` | every repair request on random operands |
| `tb_mult12x12` | products, cell enables, a fault in each of the nine cells injected and repaired (both builds) |
| `tb_adder1`, `tb_adder2` | both builds against integer addition |
| `tb_cifm24` | 24x24 products, all 40 power enables, repair (both builds) |
| `tb_fp_mul` | rounding, rounding carry, overflow, underflow, special values |
| `tb_cifm_top` | end to end at default parameters: mixed integer / FP stream, mode switches, switch-off, fault and repair, every FP corner |
| `tb_cifm_top_rev` | the same for the reversible build |

Faults are injected by forcing the internal `raw_p[k]` (the output of cell k)
of a `mult12x12` instance. The testbenches repair the same cell index in every
module, so they also hold with a simulator that applies a hierarchical force
to every instance of a module. The end-to-end tests count how often each
mechanism happened and fail if one never did.
