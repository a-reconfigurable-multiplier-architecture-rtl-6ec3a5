# A runtime-reconfigurable approximate multiplier for a RISC-V execution stage

Neural-network kernels such as convolution and matrix multiplication are
dominated by multiplications and tolerate small arithmetic errors. How much
error they tolerate varies from layer to layer and from workload to workload,
so a multiplier with a fixed degree of approximation is either too
inaccurate for some code or wastes energy on the rest. This design is a
32-bit RV32M multiplier whose accuracy software sets at run time, through a
custom CSR, from fully exact down to 255 degrees of approximation. It
replaces the separate exact and approximate multipliers of a small 3-stage
RISC-V core with one unit.

The approximation is applied at the lowest level, inside the 4:2
compressors of an 8×8 partial-product reduction tree. Each compressor in the
tree's middle columns has an error-control input `Er`. With `Er = 1` it is
exact. With `Er = 0` it computes a cheaper, slightly wrong sum. One control
bit per column gives an 8-bit `Er` word per 8×8 multiplier. Larger
multipliers are built from that 8×8 block: a 16-bit multiplier reuses it for
four cycles, and four 16-bit multipliers make the 32-bit one.

## Contents

| Part | File | What it is |
|---|---|---|
| package | `rtl/rmul_pkg.sv` | compressor variant enum, `mulcsr_t` field layout, CSR addresses, funct3 codes |
| RFA | `rtl/rfa.sv` | reconfigurable full adder |
| DFC | `rtl/dfc.sv` | 4:2 compressor made of two RFAs |
| SSC | `rtl/ssc.sv` | 4:2 compressor based on single-stage stacking |
| helpers | `rtl/full_adder.sv`, `rtl/comp42_exact.sv`, `rtl/rcomp42.sv` | exact cells, and the DFC/SSC selector |
| 8×8 multiplier | `rtl/rmul8.sv` | two-stage reduction tree, reconfigurable region in columns 3..10 |
| 16×16 multiplier | `rtl/rmul16.sv` | one `rmul8` used over four cycles |
| 32×32 multiplier | `rtl/rmul32.sv` | four `rmul16` in parallel, one `Er` word each |
| CSRs | `rtl/approx_csr.sv` | `alucsr` (0x800), `mulcsr` (0x801), `divcsr` (0x802) |
| multiplier unit | `rtl/mul_unit.sv` | `mulcsr` decoding, MUL/MULH/MULHSU/MULHU, output select |
| top | `rtl/ex_mul_top.sv` | CSRs + multiplier unit |

The rest of the core is not part of this RTL: the pipeline, register file,
ALU, divider and standard CSR file. The top exposes a CSR access port and a
multiply port, the places where the core would connect.

## Controlling accuracy: `mulcsr`

`mulcsr` sits at CSR address 0x801 and resets to 0, which means exact
operation. Its fields:

| bits | field | meaning |
|---|---|---|
| 0 | `approx_en` | 1 = use the `Er` fields; 0 = exact, whatever the fields hold |
| 2:1 | `ckt_sel` | 00 = the reconfigurable multiplier. The other codes name reserved circuits that do not exist; the unit then returns 0 |
| 10:3 | `er_ll` | `Er` of the low×low 16-bit unit |
| 18:11 | `er_mid` | `Er` of both cross-product 16-bit units |
| 26:19 | `er_hh` | `Er` of the high×high 16-bit unit |
| 31:27 | custom | stored, unused |

An `Er` bit of 1 makes its column exact. `Er = 8'hFF` is exact, `8'h00` is
the most approximate setting. Example: `csrrw x0, 0x801, x7` with
`x7 = 0x07FF8001` does three things:

- it turns approximation on;
- it sets the low×low unit to maximum approximation (`Er = 0x00`);
- it makes the cross units exact in their four high columns (`Er = 0xF0`) and the high×high unit fully exact.

`mulcsr = 0x00000001` is the "approximate everything" setting. A CSR write
takes effect for the next multiply. The unit captures the control fields
when a multiply starts, so a CSR write during a multiply cannot disturb it.

`approx_csr` implements CSRRW, CSRRS and CSRRC semantics (`csr_op` = write,
set, clear). The immediate forms use the same codes with the zero-extended
immediate as data. `csr_rdata` returns the old value combinationally.

## The compressors

A 4:2 compressor takes four bits of one column, `X1..X4`, plus `Cin` from
the column to its right. It returns `Sum` (weight 1) and two weight-2 bits:
`Carry` into the next column's reduction, and `Cout` into the `Cin` of the
next column's compressor. Exact means
`X1+X2+X3+X4+Cin = Sum + 2·(Carry + Cout)`.

**RFA** (`rfa.sv`). This is a full adder with an `er` input:

| `er` | `sum` | `cout` |
|---|---|---|
| 1 | `a ^ b ^ cin` | `maj(a, b, cin)` |
| 0 | `(a ^ b) \| cin` | `a & (b \| cin)` |

In approximate mode it is wrong for 2 of its 8 input combinations.

**DFC** (`dfc.sv`). The first RFA adds `X1, X2, X3` and produces `Cout`. The
second adds `X4`, the first RFA's sum and `Cin`, and produces `Carry` and
`Sum`. In approximate mode 13 of the 32 input cases are wrong, with errors
of +1, −1 and −2. Because both signs occur, errors partly cancel in a
multiplier.

**SSC** (`ssc.sv`). The two input pairs are first "stacked" into OR/AND
pairs, which gives the count of ones and the parity directly. The weight-2
part of the column total `n = X1+X2+X3+X4+Cin` is split as
`Carry = (n ≥ 2)` and `Cout = (n ≥ 4)`. `Sum` is `parity ^ Cin` when exact
and `parity | Cin` when approximate. So the approximate SSC errs only when
`Cin = 1` and the four inputs have odd parity. That is 8 of 32 cases, always
by +1.

Both compressors reproduce the published truth table row for row, with one
exception. In the DFC row `X=1011, Cin=0`, the table prints `Sum = 1`, but
also an error distance of +1. That distance requires `Sum = 0`, and the RTL
gives `Sum = 0`.

## The 8×8 multiplier (`rmul8.sv`)

The bit `a[j]&b[i]` of weight `2^(i+j)` lies in column `c = i + j`. Column
heights for c = 0..14 are 1,2,3,4,5,6,7,8,7,6,5,4,3,2,1. The tree reduces
them to two rows in two stages. An exact adder then sums the two rows. The
cell placement is the core of the design:

| column | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | 11 | 12 | 13 |
|---|---|---|---|---|---|---|---|---|---|---|---|
| height | 4 | 5 | 6 | 7 | 8 | 7 | 6 | 5 | 4 | 3 | 2 |
| stage 1 | – | FA | RC | RC, FA | RC, RC | RC, RC (3 bits) | RC, FA | RC | FA | – | – |
| after stage 1 | 4 | 3 | 3 | 3 | 3 | 4 | 4 | 4 | 4 | 4 | 2 |
| stage 2 | RC | RC | RC | RC | RC | RC | RC | RC | EC | EC | FA |
| `Er` bit | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | – | – | – |

Cell types:

- **RC** is a reconfigurable compressor: a DFC in the DFM variant, an SSC in the SSM variant.
- **EC** is an exact 4:2 compressor.
- **FA** is an exact full adder.

Column 2 has one FA in stage 2. Columns 0, 1 and 14 only pass their bits
through.

Carry chains:

- **Upper stage-1 chain.** It runs from the carry of the column-4 FA through the first RC of columns 5 to 10. Its last `Cout` becomes a bit of column 11.
- **Lower stage-1 chain.** The column-6 FA's carry feeds the column-7 lower RC, which feeds the column-8 lower RC, which feeds the column-9 FA.
- **Stage-2 chain.** It starts at column 3 with `Cin = 0` and runs through column 12 into the column-13 FA.

Each `Er` bit drives every RC in its column, in both stages. Raising `Er`
from 63 to 64 makes column 9 exact but turns off the exactness of columns
3..8. The error therefore rises and falls sharply at such boundaries.

Inside a column, bits are used in order of increasing `i`. The first cells
get the bits with the lowest `i`. That order affects only the approximate
results.

## 16- and 32-bit multipliers and timing

`rmul16` captures `a`, `b` and `er` on `start`. Over the next four cycles
its single `rmul8` forms, in order, `AL·BL`, `AH·BL`, `AL·BH` and `AH·BH`
(8-bit halves). Each product is written into its own register. The output
is the sum of the four registers shifted by 0, 8, 8 and 16 bits.

`rmul32` runs four `rmul16` units in lock step on the 16-bit halves. Their
outputs are summed with shifts of 0, 16, 16 and 32. Each unit's `Er` comes
from its own `mulcsr` field.

```
cycle      t      t+1   t+2   t+3   t+4   t+5
start      1
busy              1     1     1     1
sub-prod          LL    HL    LH    HH
done                                      1     result valid, held until next start
```

A multiply therefore takes 5 cycles from issue to result. `busy` is the
stall request to the pipeline. A `start` while `busy` is ignored.

`mul_unit` serves all four RV32M multiplies with this unsigned datapath:

- For MULH and MULHSU it multiplies the operands' magnitudes and negates the 64-bit product when the signs differ.
- MUL returns the low word; the three MULH forms return the high word.

In approximate mode the error is therefore applied to magnitudes.

## Accuracy of this implementation

Exhaustive over all 65536 operand pairs of the 8×8 block (the testbench
checks these numbers):

| `Er` | DFM error rate | DFM MRED | SSM error rate | SSM MRED |
|---|---|---|---|---|
| 0 | 78.51 % | 5.46 % | 16.62 % | 0.37 % |
| 63 | 46.80 % | 3.90 % | 2.35 % | 0.08 % |
| 64 | 75.52 % | 5.04 % | 16.02 % | 0.33 % |
| 127 | 30.75 % | 3.09 % | 1.18 % | 0.04 % |
| 128 | 75.74 % | 3.71 % | 16.24 % | 0.32 % |
| 255 | 0 | 0 | 0 | 0 |

The published maximum-approximation figures are 75.70 % / 5.89 % for the
DFM, which this DFM approaches closely. For the SSM they are
66.65 % / 7.68 %, and this SSM is far more accurate than that. The
published SSC schematic does not give an exact compressor when transcribed
gate by gate. The SSC here is therefore built from the truth table, which
lists every erroneous case. With that compressor, errors need `Cin = 1`,
which in this tree is rare. The published SSM must route or split the
weight-2 outputs differently in ways the sources do not show. Treat the
SSM's approximate results as this design's, not as a reproduction.

Kernels run through the top with `mulcsr = 0x1` (SSM, every `Er` 0,
non-negative 8-bit data), from `tb_workloads`:

| kernel | multiplies | wrong outputs | output MRED |
|---|---|---|---|
| 2-D conv, 3×3 kernel on 3×3 image | 49 | 8/9 | 0.29 % |
| 2-D conv, 3×3 kernel on 6×6 image | 256 | 30/36 | 0.22 % |
| matrix multiply 3×3 | 27 | 3/9 | 0.67 % |
| matrix multiply 6×6 | 216 | 24/36 | 0.28 % |
| factorial loop | 4 | 0/1 | 0 |
| FIR, 8 taps × 16 samples | 100 | 12/16 | 0.67 % |
| IIR, first order × 16 samples | 32 | 2/16 | 0.21 % |

The image, filter and data sizes are this design's choices where the kernel
names do not fix them. Exact mode (`mulcsr = 0`) gives exact results for all
of them.

## Departures and choices to know about

- **Region columns.** The reconfigurable region is 0-based columns 3..10 (heights 4, 5, 6, 7, 8, 7, 6, 5), the columns the dot diagram marks as reconfigurable. The prose description numbers the region "[11:4]", which matches this only when columns are counted from 1.
- **What each `Er` field controls.** One reading is that the three fields address the 8×8 sub-products inside each 16-bit unit. This RTL follows the other reading, supported by the 32-bit block diagram: each 16-bit unit has one `Er` word for all four of its cycles.
- **DFC wiring.** The figure does not label which pin of the second RFA gets `X4` and which gets the first RFA's sum. Only `X4` on the `a` pin reproduces the truth table, and that is the wiring used.
- **SSC.** Functional, from the truth table. See the accuracy section above.
- **This design's own choices.** The sign handling for MULH/MULHSU, the start/busy/done handshake, operand capture, the 5-cycle latency, the zero result for reserved circuit-select codes and the stand-alone CSR block.
- **Reuse over speed.** No attempt is made to hide the 5-cycle latency. The 8-bit block is reused exactly as specified.

## Simulating

Each testbench is self-checking and prints
`TB_RESULT checks=N failures=M`. Build one with plain Verilator from the
repository root, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/rmul_pkg.sv tb/rmul_ref_pkg.sv tb/tb_ex_mul_top.sv \
    --top-module tb_ex_mul_top -o sim && ./obj_dir/sim
```

| testbench | checks |
|---|---|
| `tb_rfa`, `tb_dfc`, `tb_ssc` | all input cases against the truth table |
| `tb_rmul8` | both variants, all operands, nine `Er` values, against a reference model and precomputed error totals |
| `tb_rmul16`, `tb_rmul32` | exact and random `Er`, latency, busy and ignored start |
| `tb_approx_csr` | CSR write, set and clear, read-back, hit flag |
| `tb_mul_unit` | all four funct3 values, exact fallback, reserved codes |
| `tb_ex_mul_top` | end to end at the default parameters: the factorial sample program, then every mechanism, each counted |
| `tb_workloads` | the kernels above |

`tb/rmul_ref_pkg.sv` holds the reference model. It is an integer,
list-based restatement of the tree and the compressor equations. To study
the DFM variant, set `VARIANT = DFM` (from `rmul_pkg`) on `ex_mul_top`,
`mul_unit` or any multiplier.
