# A reversible 8x8 Wallace-tree multiplier built from TSG gates

A reversible gate maps its inputs to its outputs one-to-one, so no
information is erased while it computes. That property is what makes a circuit
usable as a quantum network, and in principle it avoids the kT·ln2 of heat
that each erased bit costs. The price is that AND, OR and XOR, which erase
information, cannot be used. Every function has to be built from gates with
as many outputs as inputs, and the outputs nobody needs ("garbage") have to be
kept. The usual measures of a reversible circuit are how many gates it uses
and how many garbage outputs it produces.

This RTL implements a multiplier built that way around one 4-input,
4-output reversible gate, the **TSG gate**. One TSG gate with one input tied
to 0 is a complete full adder with only two garbage outputs. Two of them make
a 4:2 compressor. Full adders, half adders and compressors built from TSG
gates, plus Fredkin gates for the partial products, make up an 8x8
Wallace-tree multiplier. The design is meant as an arithmetic building block
for a reversible or quantum ALU.

The RTL models the logic function of every reversible gate exactly and keeps
every gate output: each unused output goes to a `garbage` port. It is
ordinary synthesizable combinational SystemVerilog. It does not model any
particular reversible technology.

## The TSG gate

Inputs A, B, C, D and outputs P, Q, R, S (`rtl/tsg_gate.sv`):

```
P = A
Q = A'C' xor B'
R = Q xor D
S = (Q & D) xor (A&B xor C)
```

The mapping is a permutation of the 16 input patterns, and the testbench
checks this. With **C = 0** the gate gives Q = A xor B. Then R = A xor B xor D
is a sum and S = (A xor B)·D xor AB is the matching carry. This gives:

| use | A | B | C | D | sum | carry | garbage |
|---|---|---|---|---|---|---|---|
| full adder (`tsg_full_adder`) | a | b | 0 | cin | R | S | P = a, Q = a xor b |
| half adder (`tsg_half_adder`) | 0 | a | 0 | b | R | S | P = 0, Q = a |

Each adder is one gate deep and has two garbage outputs. The half adder's
zero inputs are on A and C. Zeros on C and D would work just as well.

## The reversible 4:2 compressor

A 4:2 compressor takes four bits of one weight, `i1..i4`, plus a carry-in
`cin` from the next lower weight. It returns `sum` at that weight and two bits,
`carry` and `cout`, one weight up:

```
i1 + i2 + i3 + i4 + cin = sum + 2·(carry + cout)
```

Here it is two TSG full adders in series (`rtl/rev_compressor_4_2.sv`):

```
TSG1: A=i2  B=i3  C=0  D=i4   ->  R1 = i2^i3^i4 (internal),  S1 = cout
TSG2: A=cin B=i1  C=0  D=R1   ->  R2 = sum,                  S2 = carry
```

Because `cout` depends only on i2, i3 and i4, a row of compressors can be
chained cout→cin with no carry rippling along the row. Each `cin` only reaches
the second gate of its own compressor. The compressor uses two gates, has two
gate delays, and has four garbage outputs (the P and Q of both gates, on
`garbage[3:0]`).

## The multiplier

`rtl/rev_wallace_mult8.sv` computes `p = x * y` for 8-bit `x` and `y` in four
steps. The blocks are numbered 1 to 32 as in the original block diagram, and
the signal names Sk/Ck below are the sum and carry of block k.

### 1. Partial products (`pp_array`)

Sixty-four Fredkin gates run in parallel. A Fredkin gate is a controlled swap:
with A = 1 it exchanges B and C. Gate (i, j) takes A = x[i], B = y[j] and
C = 0, so its R output is the partial product `xiyj = x[i] & y[j]`, at weight
i + j. Its other outputs, A and A'B, are garbage.

### 2. Stage 1 (`wt_stage1`, blocks 1–18)

The rows are taken four at a time: y0–y3 go to blocks 1–9 and y4–y7 to
blocks 10–18. The two groups are wired identically, so the RTL instantiates
one helper module, `wt_row_group4`, twice. Within a group the weights are
relative to its lowest row (add 4 for the second group):

| block | type | inputs | weight |
|---|---|---|---|
| 1 | HA | x1y0, x0y1 | 1 |
| 2 | FA | x2y0, x1y1, x0y2 | 2 |
| 3–7 | 4:2 | xky0, x(k-1)y1, x(k-2)y2, x(k-3)y3, cin = cout of block k-1 (0 for block 3) | k |
| 8 | 4:2 | 0, x7y1, x6y2, x5y3, cin = cout7 | 8 |
| 9 | FA | cout8, x7y2, x6y3 | 9 |

Block k of the first group puts Sk at weight k and Ck at weight k+1. Four
partial products bypass stage 1:
- x0y0 becomes P0.
- x0y4 (weight 4), x7y3 (weight 10) and x7y7 (weight 14) go to stage 2.

S1 becomes P1.

### 3. Stage 2 (`wt_stage2`, blocks 19–31)

| block | type | inputs | weight |
|---|---|---|---|
| 19 | HA | S2, C1 | 2 |
| 20 | HA | S3, C2 | 3 |
| 21 | FA | S4, C3, x0y4 | 4 |
| 22 | FA | S5, C4, S10 | 5 |
| 23 | 4:2 | S6, C5, S11, C10, cin = 0 | 6 |
| 24–26 | 4:2 | S(k-17), C(k-18), S(k-12), C(k-13), cin = previous cout | 7–9 |
| 27 | 4:2 | x7y3, C9, S15, C14, cin = cout26 | 10 |
| 28 | FA | cout27, S16, C15 | 11 |
| 29 | HA | S17, C16 | 12 |
| 30 | HA | S18, C17 | 13 |
| 31 | HA | x7y7, C18 | 14 |

Block k puts Sk at weight k−17 and Ck at weight k−16. S19 becomes P2. Every
weight from 3 to 15 now holds at most two bits: S20..S31 and C19..C31.

### 4. Final adder (`tsg_parallel_adder`, block 32)

Block 32 is a 13-position ripple-carry adder of TSG full adders. Position i
(weight i+3) adds S(20+i) and C(19+i). The top position has only C31. The
carry-in is 0. The sum is P3..P15. The final carry out is always 0, because an
8x8 product fits in 16 bits, and it is kept as the last garbage bit. The
adder's width is a parameter, `W`, with a default of 13.

## Garbage outputs

The design has no unconnected gate outputs. Every output that feeds nothing
else leaves on the top's `garbage` port:

| bits | source | count |
|---|---|---|
| 127:0 | Fredkin gates, `{A, A'B}` of gate (i, j) at `2*(8j+i)` | 128 |
| 187:128 | stage 1: 2 per adder, 4 per compressor | 60 |
| 223:188 | stage 2 | 36 |
| 249:224 | block 32, `{Q, P}` per position | 26 |
| 250 | carry out of block 32 | 1 |

In total there are 251 garbage outputs. Many of them are copies of an input,
because a TSG's P and a Fredkin gate's A pass their A input through, or are
the constant 0 of a half adder's P. A synthesis tool reports these as idle
outputs. That is expected in reversible logic.

## Timing

There is no clock, reset or register anywhere. Every block is combinational,
and its delay is counted in gate levels:
- full adder: 1 gate
- 4:2 compressor: 2 gates
- whole multiplier: the longest path goes through one Fredkin gate, the
  stage-1 and stage-2 compressor chains, and the 13 positions of the ripple
  adder.

A faster parallel adder in block 32 would shorten the multiplier's critical
path. This design uses the plain ripple adder.

## Where this RTL makes its own choices

The gate equations, the two adder configurations, the compressor wiring, the
block numbering, the inputs of every multiplier block and the structure of
the final adder all follow the published design. The following are choices
made here:

- **No clock.** Delays described as "units" or "clock cycles" are treated as
  gate levels of combinational logic.
- **Fredkin gate for C = 1.** The partial-product gate is only specified with
  C = 0 (outputs AB, A'B, A). For C = 1 the module uses the standard Fredkin
  (controlled-swap) definition.
- **Operand fan-out.** Which operand drives the Fredkin control input is a
  free choice here. Operand bits fan out to several gates. A strictly
  reversible netlist would need copy gates, and this RTL does not model them.
- **Input order.** The order of the four inputs on each compressor follows the
  top-to-bottom order in which they appear in the block diagram. Sum and carry
  do not depend on this order, but cout does.
- **Carry into block 32.** C19 enters the adder as a normal operand bit at
  position 0, with a carry-in of 0. The diagram draws it entering from the top
  of the chain. The result is the same.
- **Garbage port.** The `garbage` port, its bit order and its total count of
  251 are this design's own. Garbage counts were published only for the full
  adder (2) and the compressor (4).
- **Width.** The operand width is fixed at 8, as in the block diagram. The
  architecture is said to generalise to NxN, but no general construction is
  given, so there is no width parameter on the top.

## Files

| file | contents |
|---|---|
| `rtl/rev_mult_pkg.sv` | operand width, adder width, garbage widths, partial-product type |
| `rtl/tsg_gate.sv` | TSG gate |
| `rtl/fredkin_gate.sv` | Fredkin gate |
| `rtl/tsg_full_adder.sv`, `rtl/tsg_half_adder.sv` | one-gate adders |
| `rtl/rev_compressor_4_2.sv` | two-gate 4:2 compressor |
| `rtl/pp_array.sv` | 64 Fredkin gates, parameter `W` (default 8) |
| `rtl/wt_row_group4.sv` | four-row reduction used twice by stage 1 |
| `rtl/wt_stage1.sv`, `rtl/wt_stage2.sv` | Wallace stages |
| `rtl/tsg_parallel_adder.sv` | ripple adder, parameter `W` (default 13) |
| `rtl/rev_wallace_mult8.sv` | top level |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

## Verification

Each testbench compares the block with values computed independently of it.
Each one prints `TB_RESULT checks=N failures=M` and stops itself after a fixed
simulated time if it hangs.

- The gates, adders and compressor are tested exhaustively. The compressor
  test also checks that `cout` does not depend on `cin`.
- The TSG and Fredkin tests also check that every output pattern occurs
  exactly once, so each gate is reversible.
- The two Wallace stages are driven with random bit patterns, not only real
  products. For each stage, the weighted sum of its outputs must equal the
  weighted sum of its inputs.
- The ripple adder is checked against `a + b + cin` with random operands and
  with full-length carries.
- The top-level test runs all 65,536 products at the default sizes. It also
  checks the partial-product garbage and the zero final carry. It counts how
  often the design's mechanisms occur, and fails if any never occurs:
  - a compressor cout feeding the next compressor, in each stage
  - the last cout of a chain absorbed by a full adder
  - a carry rippling into the top of block 32
  - P15 = 1

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/rev_mult_pkg.sv \
    tb/tb_rev_wallace_mult8.sv --top-module tb_rev_wallace_mult8
./obj_dir/Vtb_rev_wallace_mult8
```

The command is the same for the other testbenches; change the file and the
top module name. The whole top-level test takes well under a second.
