# Concurrent error detection for lightweight MixColumn layers

MixColumn in a lightweight block cipher is a matrix multiplication: a 4x4
array of 4-bit cells is multiplied by a fixed MDS (or almost-MDS) matrix over
a small field. A fault in this linear layer, whether from noise or from an
attacker, spreads over a whole column and corrupts the ciphertext. This RTL
detects such faults while the circuit runs, with three mechanisms:

* **Cumulative column signature (CCS).** Because the layer is linear, the XOR
  of the four output cells of a column is itself a fixed linear function of
  the four input cells. It can be predicted from the input by a much smaller
  circuit than the MixColumn, and compared with the XOR of the actual outputs.
* **Interleaved CCS (ICCS).** The same idea with two signatures per column:
  rows 0 and 2 summed, and rows 1 and 3 summed. It costs more but also sees
  faults that cancel in the plain column sum.
* **Fault space transformation (FST).** Spatial redundancy where the
  redundant copy is stored in a transformed form W(y) instead of y, so that
  the same fault injected into both registers no longer cancels out.

The signature schemes are built for two ciphers whose matrices are fully
specified: Midori64 with its involutive almost-MDS matrix M_C, and LED.

## State layout

All modules exchange a 64-bit state of 16 cells a0..a15. The cells form a 4x4
matrix read row by row, so column j is (a_j, a_{j+4}, a_{j+8}, a_{j+12}) and
the MixColumn is R = M x A. Cell a_i is in bits [4i+3:4i] of the packed
vector (`mixcol_pkg::state_t`, where `state[i]` is a_i). Inside a cell bit 3
is the coefficient of x^3. The packing of cells into the 64-bit word is this
design's choice and may differ from a cipher specification's order, so
convert at the boundary if you connect a cipher core that numbers cells from
the most significant end.

## The two MixColumns

**Midori64, M_C = circ(0,1,1,1)** (`midori_mixcol`). Every entry is 0 or 1,
so each output cell is the XOR of the other three cells of its column:
r0 = a4+a8+a12, r4 = a0+a8+a12, and so on. M_C x M_C = I, so the same circuit
is its own inverse. That property is used by the FST unit.

**LED** (`led_mixcol`). The matrix over GF(2^4), reduced by x^4+x+1, is

```
    4 1 2 2
    8 6 5 6
    B E A 9
    2 2 F B
```

so for example r0 = x^2.a0 + a4 + x.a8 + x.a12. The constant multiplications
are written as a shift-and-add function (`mixcol_pkg::gf_mul`); with constant
operands it unrolls into fixed XOR networks.

## Signature prediction

Summing rows of the matrix gives the prediction coefficients. This is the core
of the scheme:

| Matrix | Signature | Prediction for column 0 (same coefficients for all columns) |
|---|---|---|
| M_C | CCS r0+r4+r8+r12 | a0 + a4 + a8 + a12 (each coefficient 0+1+1+1 = 1) |
| M_C | even rows r0+r8 | a0 + a8 |
| M_C | odd rows r4+r12 | a4 + a12 |
| LED | CCS | 5.a0 + B.a4 + 2.a8 + 6.a12 |
| LED | even rows r0+r8 | F.a0 + F.a4 + 8.a8 + B.a12 |
| LED | odd rows r4+r12 | A.a0 + 4.a4 + A.a8 + D.a12 |

For LED, the column sums of the matrix are 4+8+B+2 = 5, 1+6+E+2 = B,
2+5+A+F = 2, 2+6+9+B = 6 (addition is XOR). The bit-level expansions of r0
and of the LED CCS in the source description were checked against these
nibble-level formulas over all 2^16 inputs of one column, and they agree.

The predictors (`midori_ccs_pred`, `midori_iccs_pred`, `led_ccs_pred`,
`led_iccs_pred`) compute these from the MixColumn input. The checkers form
the actual signatures from the delivered output: `ccs_check` needs three
nibble XORs per column (12 XOR gates), and `iccs_check` needs two (8 gates).
They XOR actual with predicted signature and OR-reduce the result to one flag
per column (`err_col`) and one overall flag (`err`). How the comparison is
done is not specified by the scheme; the XOR and OR-reduce is the simplest
version.

**What the signatures can and cannot see.** Since everything is linear, the
output with a fault mask e is R + e. The signature check therefore fires
exactly when the signature of e itself is nonzero:

* Any fault confined to one cell of a column is always detected by both
  schemes.
* CCS misses a fault that flips the same pattern in two cells of one column,
  or more generally any e whose four cells of some column XOR to zero.
* ICCS misses only faults whose even-row pair and odd-row pair each XOR to
  zero. It therefore catches a double fault in rows 0 and 1 that CCS misses.
  It still misses the same fault in rows 0 and 2.

The testbenches rely on this: the expected flags are computed from the fault
mask alone.

## Protected MixColumn (`ed_mixcol`)

`ed_mixcol #(CIPHER, SCHEME)` joins one MixColumn with its predictor and
checker. `CIPHER` is `MIDORI_MC` or `LED` and `SCHEME` is `CCS` or `ICCS`.
These are the four architectures whose area the source compares. The `fault`
input is a test hook. It is XORed onto the MixColumn result before the
checker, so a testbench can model a datapath fault. Tie it to zero in use.
The module is purely combinational. An immediate assertion states the
scheme's basic promise: with a zero fault mask, `err` never rises.

## Fault space transformation (`fst_mixcol`)

```
 a --> MixColumn ----------------> [orig reg] ------------------------> XOR --> err
 |                                                                      ^
 +--> MixColumn (redundant) --> W --> [red reg] --> W^-1 ---------------+
```

Two copies of the MixColumn (LED by default, `CIPHER` parameter) compute the
same result. The original is stored as is. The redundant result is mapped by
W before it is stored and mapped back by W^-1 afterwards. `err` is the OR of
the XOR of the two.

With faults e_o and e_r on the two register inputs (the `fault_orig` and
`fault_red` test hooks), the paths differ by e_o + W^-1(e_r). A fault in only
one register is always seen. The same fault e in both registers, which plain
duplication can never see, is seen unless e = W^-1(e). This design uses
W = W^-1 = M_C, applied to each column. For M_C the fixed points are exactly
the masks whose every column XORs to zero. So a random 64-bit collision
escapes with probability 2^-16, and a collision confined to one cell never
escapes.

The FST experiment described in the source protects the KLEIN cipher and uses
KLEIN's MixNibble as W and InvMixNibble as W^-1. Neither matrix is given
there, so this design uses M_C, the involutive matrix it does give. It also
protects a MixColumn instead of a KLEIN round. The rest of the structure
(original and redundant computation, W, register update, W^-1, XOR to error)
follows the block diagram.

Timing: `a` is sampled on the rising edge of `clk` when `en` is high. `r` and
`err` are valid after that edge and hold while `en` is low. `rst_n` is
asynchronous, active low, and clears both registers, so `err` is 0 after
reset.

## Top level (`mixcol_ed_top`)

The top puts all the mechanisms side by side on one input:

| Unit | Contents | `result[u]` | `err[u]` |
|---|---|---|---|
| 0 | Midori64 M_C + CCS | MixColumn result | signature mismatch |
| 1 | Midori64 M_C + ICCS | " | " |
| 2 | LED + CCS | " | " |
| 3 | LED + ICCS | " | " |
| 4 | LED with FST redundancy | original register | paths differ |

Units 0-3 are combinational and are followed by a result register, the way a
round register would follow them in a cipher. Their per-column flags come out
on `err_col[u]`. Every result appears one clock after `in_valid`, with
`out_valid`. Results and flags hold while `in_valid` is low. `fault[u]` and
`fault_fst_red` are the fault-injection hooks (unit 4's `fault[4]` hits its
original register). The top has no parameters. The result register, the
valid flag and the reset are this design's additions; the source describes
only the units.

## Simulation

Each module has a self-checking testbench `tb/tb_<module>.sv`. Each one ends
by printing `TB_RESULT checks=N failures=M`. The reference model
`tb/tb_ref_pkg.sv` does a plain matrix multiplication (carry-less product,
then reduction) with the matrices entered anew, and it forms signatures from
its own result, not from the closed-form predictions. For example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/mixcol_pkg.sv tb/tb_ref_pkg.sv tb/tb_mixcol_ed_top.sv --top-module tb_mixcol_ed_top
./obj_dir/Vtb_mixcol_ed_top
```

`tb_mixcol_ed_top` runs the whole design at its only configuration. It sends
4000 operations with random gaps and random fault scenarios, and checks every
result, flag and per-column flag against the reference. It also counts the
mechanisms and fails if one never happened: a detection by each unit, a
double fault missed by CCS but caught by ICCS, an FST collision caught, a
fixed-point collision that escapes, and idle cycles. It runs in well under a
second. `tb_ed_mixcol` and `tb_fst_mixcol` do the same per unit, including
the one-clock latency and the hold with `en` low.

## Departures and limits

* Midori64's other matrix M_B and KLEIN's two-nibble MixNibble are not built.
  The source counts their gates but does not print the matrices.
* W in the FST unit is M_C, not KLEIN's MixNibble (see above).
* Recomputation (time redundancy) is named in the source as a third option
  but is not described beyond the FST diagram, and is not built.
* The RTL states the function and leaves XOR sharing to synthesis. The gate
  counts in the source are for unshared XOR trees, and its ASIC areas are
  for a 65 nm library after optimisation. Neither is reproduced here.
* The source contradicts itself on the extra gates the Midori ICCS needs. One
  sentence says twelve and another says eight. The equations (two nibble
  XORs per column, 8 gates) are what is built.
* In the source, one step of the Midori odd-row derivation prints a_3 where
  a_12 is meant. The result of that step, a4 + a12, is what is built.
