# qBSA — a block-skewed 32-bit ALU for gate-level pipelined logic

In rapid single-flux-quantum (RSFQ) logic every gate is clocked, so even a
32-bit adder becomes a pipeline some fifteen stages deep. Independent
operations can stream through it one per cycle, but an operation that needs
the previous result has to wait for the whole pipeline to drain: fifteen
cycles of bubbles for every data-dependent step.

The block-skewed ALU (qBSA) shortens that wait. The 32-bit word is cut into
eight 4-bit blocks. Block *k* starts its work *k*+1 cycles after the
operands arrive, one cycle after the block below it. Each block only needs
its carry-in late in its own pipeline (after five of its seven stages), and
the block below produces that carry exactly then. The carry therefore ripples
upward one block per cycle while all blocks overlap. The low blocks finish
first. Each block feeds its result straight back to its own B input through a
multiplexer, so a dependent operation can start as soon as the lowest block
has its 4 result bits (8 cycles), not when the whole word is done (15 cycles).

| quantity | value |
|---|---|
| latency, operands to full 32-bit result | 15 cycles |
| initiation interval, independent operations | 1 cycle |
| initiation interval, dependent operations (via feedback) | 8 cycles |

This repository gives the ALU as synthesizable SystemVerilog. Each clocked
RSFQ gate level is one register stage of ordinary synchronous logic, so the
RTL keeps the cycle timing of the superconducting design.

## Timing of the skew

All operands, the control word and the feedback select are issued together
at cycle t0. The table lists when each block has what (cycles after t0):

| block | bits | input FF stages | core starts | carry-in used | `C_out_early` | result |
|---|---|---|---|---|---|---|
| B0 | 3:0 | 1 | t0+1 | t0+6 (own C_in, delayed in-block) | t0+7 | t0+8 |
| B1 | 7:4 | 2 | t0+2 | t0+7 (= C4_early) | t0+8 | t0+9 |
| B*k* | 4k+3:4k | k+1 | t0+k+1 | t0+k+6 | t0+k+7 | t0+k+8 |
| B7 | 31:28 | 8 | t0+8 | t0+13 | t0+14 | t0+15 |

The last input stage of each block is where the feedback multiplexer sits.
Block *k*'s result leaves at t0+8+*k*. The B bits of an operation issued at
t1 reach block *k*'s multiplexer at t1+*k*. These two meet when t1 = t0+8,
in every block at once. That is why the dependent interval is 8 whatever the
block count, while the full-word latency is 7 + number of blocks.

The carry-out of the whole word, `C_out`, is `C_out_early` of B7 delayed by
one stage (t0+15). `C_out_early` is the copy that feeds the next block's
carry-in.

## Inside a 4-bit block (`sklansky_alu4`)

Each block is a 4-bit Sklansky (parallel-prefix) adder extended into an ALU.
It has seven register stages:

1. complement: a' = A xor Cmpl_a, b' = B xor Cmpl_b
2. generate g = a' and b', propagate p = a' xor b'
3. operation gating (the Op_* controls reach here through two stages):
   carry generate g and Op_ARITH, propagate p, and the result term
   L = (Op_AND and g) or (Op_XOR and p)
4. first prefix level: groups 1:0 and 3:2
5. second prefix level: group generate/propagate of bits *i*:0 for every *i*
6. carry-in merge: c[*i*+1] = G[*i*:0] or (P[*i*:0] and c_in); c[4] is `C_out_early`
7. result S = L xor c; `C_out` = `C_out_early` one stage later

There are two variants, selected by `FIRST_BLOCK`:

* **First block (B0)**: the carry-in comes with the operands (the `cin` field
  of the control word). A five-register delay line inside the block carries
  it to stage 6.
* **Delayed-carry block (B1–B7)**: the carry-in (`cin_late`) is an input that
  must arrive five cycles after the block's operands. It comes straight from
  the previous block's `C_out_early`.

Only the carry-in is late. Everything up to the prefix tree depends on the
block's own operands alone, and that is what makes the skew work.

## Operations

Six control signals select the operation:

| operation | Op_ARITH | Op_AND | Op_XOR | Cmpl_a | Cmpl_b | C_in | result |
|---|---|---|---|---|---|---|---|
| ADD | 1 | 0 | 1 | 0 | 0 | 0 | A + B |
| SUB | 1 | 0 | 1 | 0 | 1 | 1 | A − B |
| SLT | 1 | 0 | 1 | 0 | 1 | 1 | A − B (same as SUB) |
| EQ  | 0 | 0 | 1 | 0 | 1 | 1 | zero, with C_out = 1, exactly when A = B |
| AND | 0 | 1 | 0 | 0 | 0 | 0 | A & B |
| OR  | 0 | 1 | 1 | 0 | 0 | 0 | A \| B |
| XOR | 0 | 0 | 1 | 0 | 0 | 0 | A ^ B |
| NOR | 0 | 1 | 0 | 1 | 1 | 0 | ~(A \| B) |

The control values are the published ones. The equation of stage 3/7 is
this design's reading of them, and it gives every row.

* For logic operations Op_ARITH is 0, so no carries are generated and the
  result is the selected AND/XOR term.
* EQ computes A xnor B with a carry-in of 1. No carries are generated, so the
  carry-in only gets through a run of equal bits. If all 32 bits match, every
  result bit is 0 and C_out is 1. Otherwise the result is non-zero.
* SLT shares SUB's controls. Deriving the 1-bit "less than" flag (sign of the
  difference corrected for overflow) and the EQ flag is left to the consumer
  of the result. The ALU has no flag logic of its own.

`qbsa_op_decode` turns a 3-bit operation code (`qbsa_pkg::alu_op_t`, in the
row order above) into this control word. The encoding is this design's own.

## Interfaces

`qbsa_top` is the design's top: the decoder in front of `qbsa_alu32`.

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset of all pipeline registers |
| `in_valid` | in | 1 | an operation is issued this cycle |
| `op` | in | 3 | `alu_op_t`: ADD, SUB, SLT, EQ, AND, OR, XOR, NOR |
| `a`, `b` | in | 32 | operands, issued together (not skewed) |
| `fb` | in | 1 | use the result of the operation issued exactly 8 cycles earlier in place of B |
| `s_skewed` | out | 32 | raw block outputs: bits 4k+3:4k valid at t0+8+k |
| `blk_valid` | out | 8 | `blk_valid[k]` marks a result in block k's bits of `s_skewed` |
| `s` | out | 32 | whole result, aligned, at t0+15 |
| `out_valid` | out | 1 | `s`, `cout`, `cout_early` hold a result |
| `cout` | out | 1 | carry out of bit 31 (t0+15) |
| `cout_early` | out | 1 | B7's early carry, held one stage so it lines up with `s` |

`qbsa_alu32` has the same ports, with the control word `ctrl`
(`qbsa_pkg::alu_ctrl_t`) in place of `op`. Its parameter `N_BLOCKS` (default 8)
sets the number of 4-bit blocks.

**Feedback rule.** The multiplexer takes whatever the block outputs in that
cycle. `fb` therefore means "B is the result of the operation issued 8 cycles
ago". For a dependent operation issued later than that, supply the value on
`b` instead. An assertion in `qbsa_slice` reports `fb` set when no operation
was issued 8 cycles earlier.

Operations may issue every cycle with no stall. There is no back-pressure.

## Module structure

```
qbsa_top
├── qbsa_op_decode            operation -> control word
└── qbsa_alu32                8 slices, carry chain, output alignment
    ├── qbsa_slice #(K)       K+1 input stages (last one with the B feedback MUX) + core
    │   ├── dff_chain         input skew registers
    │   ├── sklansky_alu4     7-stage 4-bit core (FIRST_BLOCK for K = 0)
    │   └── dff_chain         valid bit through the core
    └── dff_chain             de-skew of blocks 0..6 for the aligned output
```

`qbsa_pkg` holds the shared types and constants (`CIN_STAGE` = 5,
`CORE_DEPTH` = 7, `ALU_LATENCY` = 15).

## What follows the published design and what does not

Taken from the published design:

* eight 4-bit Sklansky blocks with their input skew (one to eight FF stages)
* the feedback multiplexer on B in each block's last input stage
* the first block's carry delayed by five registers, and the late carry entry
  of the other blocks after five stages
* the `C_out_early`/`C_out` pair
* the six control signals and the operation table
* the timing: latency 15, interval 8 dependent and 1 independent, and every
  per-block time listed above

This design's own choices:

* **Stage-level gate model.** The superconducting cells (clocked gates,
  splitters, merge buffers) become ordinary logic plus one register per gate
  level. The split of the prefix logic into stages 3–5 is this design's own.
  The published block diagram was used for the stage counts, not gate by gate.
* **Result equation.** The equation in "Inside a 4-bit block" was derived to
  match the operation table.
* **Controls travel with the data.** The controls and `fb` go through the
  same skew registers as the operands, so every block sees its own
  operation's controls. The published diagram draws only the operand chains.
* **Valid bits, reset and aligned output.** These do not exist in the pulse
  logic and are added for use in a synchronous system: the valid bits, the
  synchronous reset, and the de-skew registers behind the aligned `s`.
  `s_skewed` is the output as the published design produces it.
* **Decoder encoding.** The operation encoding and the decoder in front of
  the ALU are this design's own.

Not included:

* the superconducting cell library
* the RISC-V processor that the ALU was evaluated in (only an instruction-count
  model of it was published)
* the two baseline ALUs it was compared against (a 32-bit Ladner–Fischer ALU
  and a 4-bit bit-sliced one)

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

* `tb_sklansky_alu4`: both block variants, 3000 random operations issued
  back to back. Results, `C_out_early` and `C_out` are checked at exactly
  6 and 7 cycles. The reference model is first checked against integer
  arithmetic for all 4-bit operand pairs.
* `tb_qbsa_slice`: slices 0 and 3 with random operations, idle cycles,
  feedback and a random external carry. Checks the 7+K / 8+K timing.
* `tb_qbsa_alu32`: a random stream biased towards carries that ripple
  through all eight blocks, with feedback. Each block's skewed output is
  checked at its own cycle, the aligned word and carries at t0+15. Also:
  * 0000000f + 00000002 = 00000011 after 15 cycles
  * a 30-step dependent chain whose last result must come 8·30+15 cycles
    after the first issue
  * a 32-operation burst that must give 32 results on consecutive cycles
* `tb_qbsa_alu16`: the ALU with `N_BLOCKS` = 4. Checks an 11-cycle latency
  and feedback at 8 cycles against the reference at 16 bits.
* `tb_qbsa_op_decode`: every table row, and each control word applied to
  random operands against integer arithmetic.
* `tb_qbsa_top`: 20 000 cycles end to end at full size. It counts feedback
  uses, back-to-back issues, full-width carry ripples, carry-outs, every
  operation, and EQ true and false. It fails if any of them never happened.

`qbsa_ref_pkg` (in `tb/`) holds the bit-serial reference model the
testbenches share. It is a plain ripple-carry evaluation of the control
word, independent of the prefix-tree structure of the RTL.

## Running it

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/qbsa_pkg.sv tb/tb_qbsa_top.sv --top-module tb_qbsa_top
./obj_dir/Vtb_qbsa_top
```

Replace `tb_qbsa_top` with any other testbench name. Every run takes well
under a second.

To change the width, set `N_BLOCKS` on `qbsa_alu32`. The latency becomes
7 + `N_BLOCKS`; the dependent interval stays 8. `tb_qbsa_alu16` checks this
with four blocks. `qbsa_top` is fixed at 32 bits.
