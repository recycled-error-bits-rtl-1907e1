# Recycled Error Bits: a floating point adder that hands back its rounding error

Every floating point addition rounds, and the rounding throws information away.
For a long running sum, the discarded pieces add up. A sum of floats can then end
up far less accurate than a sum of doubles, even though each single addition lost
less than one unit in the last place (ulp). Software can recover the lost part
with error-free transformations such as TwoSum, but each recovery costs several
extra additions.

Recycled Error Bits (REBits), proposed by Nathan, Anthonio, Lu, Naeimi, Sorin and
Sun, moves that recovery into the adder. Each `fpadd` still writes its rounded sum
to a floating point register. It also writes the exact error of that sum,
`err = (a + b) - sum`, to a dedicated architectural register, FPERR. The error is
itself an ordinary IEEE-754 number of the same precision. Software can move it into
a register and keep a second running sum of errors, folding it into the main sum
now and then. The result is close to what an adder of twice the width would give,
at the cost of a B-bit adder plus one move per addition.

This repository gives synthesizable SystemVerilog for the REBits adder and for a
small in-order floating point add pipeline around it. That pipeline has FPERR32 and
FPERR64, a move-from-FPERR instruction, FPERR forwarding, packed (SSE-style)
operation and the mode bit that turns REBits off.

## Why the error fits in one number

With round-to-nearest, the error of a floating point addition is always exactly
representable in the same format, unless it underflows. The exact sum has a limited
number of significant bits. The rounded sum keeps the top P of them, where
P = 24 for binary32 and 53 for binary64. The error is what is left below, and it
is smaller than half an ulp of the sum. Because of this, FPERR needs no extra
width. A binary32 adder produces a binary32 error, and a binary64 adder a binary64
error.

This holds only for round-to-nearest. With directed rounding, for example a tiny
positive B added to A and rounded up, the error is `B - ulp(A)`, and that can need
more bits than the format has. The adder here implements round-to-nearest-even
only, for that reason.

## How the adder computes the error (`rebits_fpadd`)

The adder follows the REBits flow chart. The operand of larger magnitude is A, the
other one B, and `d = exp(A) - exp(B)`.

1. **Extend.** Both significands, hidden 1 included, get P+1 zero bits on their
   right. A conventional adder adds only 3 guard bits. The wider extension keeps
   every bit of B inside the word during alignment.
2. **Align.** B is shifted right by `d`. The bits that a normal adder would discard
   here (the paper calls them B') now sit below the conventional 26-bit window.
3. **Add.** The aligned words are added, or subtracted when the signs differ. The
   result `S` is the exact sum, in a word of 2P+2 bits.
4. **Round.** `S` is normalised with a leading-one detector. The top P bits become
   the significand. The remaining P+2 bits are the *remainder*. It holds the bits
   dropped by rounding (R') and the alignment bits (B') together. The remainder
   decides the round-to-nearest-even increment.
5. **Error magnitude and sign.**
   - Rounded down in magnitude: the error magnitude is the remainder, and the error
     has the sign of the sum.
   - Rounded up: the error magnitude is the two's complement of the remainder, and
     the error has the opposite sign.
6. **Normalise the error.** A second leading-one detector finds the top bit of the
   error magnitude. The error's exponent is the sum's exponent minus the distance
   from that bit to the top of the aligned word. This is the paper's
   `exp(sum) - [exp(A) - exp(B)] - [23 - position of leading 1]`, expressed in the
   coordinates of the aligned word.

If `d >= P+2`, all of B lies below half an ulp of A. Then the sum is A and the
error is B itself, bit for bit. That case skips the datapath, so the shifter never
needs to move further than P+1 places. An assertion checks that the normalised
error never has bits beyond P, which is the representability argument above.

Worked example, the 16-bit case from the paper
(`rebits_fpadd #(.EXP_W(5), .MAN_W(10))`):

| | value |
|---|---|
| A | 1.1101001101 × 2^14 = 29904 |
| B | 1.1000111011 × 2^10 = 1595 |
| exact sum | 31499 = 1.1110110000 1011 × 2^14 |
| remainder (units of ulp = 16) | 0.1011 → above half, round up |
| sum | 1.1110110001 × 2^14 = 31504 |
| error | −(1 − 0.1011) × 16 = −5 = −1.01 × 2^2 |

Second example, binary32: 2808064.0 + 100.125 = 2808164.125. That value lies exactly
halfway between two floats 0.25 apart, and ties-to-even picks 2808164.0. The error
is +0.125.

Special values follow IEEE-754 for the sum:

- A NaN input or inf − inf gives the canonical quiet NaN.
- An infinite input or an overflow gives infinity.
- Exact cancellation gives +0.

The error is +0 in all these cases. Subnormal numbers are not supported, as in the
paper. Subnormal inputs are read as zero. A subnormal sum is flushed to a signed
zero, and an error below the normal range is flushed to +0.

## Architectural state and instructions

| State | Width | Meaning |
|---|---|---|
| `f0`–`f31` | 128 | floating point registers: one scalar in the low bits, or 4 floats / 2 doubles |
| FPERR32 | 128 | error(s) of the last 32-bit `fpadd` |
| FPERR64 | 128 | error(s) of the last 64-bit `fpadd` |
| `rebits_en` | 1 | mode bit: 0 means `fpadd` leaves FPERR unchanged |

Each instruction (`rebits_pkg::instr_t`) carries an opcode, a precision (`prec`:
32/64), a packed flag (`vec`), `rd`, `rs1`, `rs2` and a 128-bit immediate.

| `op` | Effect |
|---|---|
| `OP_FPADD` | `rd ← rs1 + rs2`; if `rebits_en`, `FPERR[prec] ← error` |
| `OP_MFERR` | `rd ← FPERR[prec]` (read the error; save at a context switch) |
| `OP_MTERR` | `FPERR[prec] ← rs1` (restore at a context switch) |
| `OP_LOAD`  | `rd ← imm` (stands in for the core's load path) |
| `OP_NOP`   | nothing |

**Packed and scalar.**

- A packed instruction (`vec = 1`) adds every lane, and lane *i* of FPERR receives
  lane *i*'s error. This is how the paper extends SSE-style packing to FPERR.
- A scalar instruction uses lane 0 and writes zeros to the other lanes of its
  result and of FPERR. That is this design's choice; SSE scalar adds keep the upper
  lanes instead.

**Precision and mode bit.**

- FPERR32 and FPERR64 are separate, so a 64-bit `fpadd` does not disturb a pending
  32-bit error.
- The mode bit is sampled with each instruction as it enters Decode.

The Figure 7 summation loop of the paper, written for this unit (registers: `f1`
sum, `f2` err, `f3` v[i], `f4` temp):

```
loop:  LOAD  f3, v[i]
       FPADD f1, f1, f3        ; sum += v[i]        FPERR32 = its error
       MFERR f4                ; f4 = FPERR32
       FPADD f2, f2, f4        ; err += error
       (every FOLD iterations)
       FPADD f1, f1, f2        ; fold err into sum
       MFERR f2                ; err = what the fold lost
end:   FPADD f1, f1, f2
```

Double-double addition takes 6 `fpadd` and 4 `MFERR` with FPERR64, in the paper's
Figure 15. The classic software version needs 20 additions. In the paper's Table 8
the two column headings of the instruction counts appear swapped. The counts used
here follow the text and Figures 14 and 15: 20 additions without REBits, 6 plus 4
moves with it.

## Pipeline (`rebits_fpu`)

```
            cycle t        t+1            t+2
in_instr -> Decode ------> Execute -----> Writeback -> register file, FPERR
            read f regs    REBits add     wb_valid/wb_rd/wb_data
            read FPERR     (one cycle)
               ^   ^            |              |
               |   +---- forward (Execute) ----+
               +-------- forward (Writeback) --+
```

- The unit accepts one instruction per cycle on `in_valid`/`in_instr` and never
  stalls.
- An instruction accepted at a clock edge is in Decode for the next cycle and in
  Execute for the one after. Its register write appears on the `wb_*` ports in its
  Writeback cycle, two cycles after acceptance. FPERR changes at the end of that
  cycle.
- The adder is a single combinational stage. The paper reports 4.89 ns for its
  REBits-32 adder in a 45 nm library, about 10 % more than the 4.45 ns baseline
  adder.

**FPERR forwarding (`fperr_bypass`).** A move-from-FPERR right after its `fpadd`
reads FPERR in Decode while the `fpadd` is still in Execute. `fperr_bypass`
therefore supplies, for the precision being read:

1. the error coming out of the adder in Execute, if that instruction writes FPERR;
2. otherwise the value waiting in Writeback;
3. otherwise the register.

A move-to-FPERR is forwarded the same way. Floating point register operands have
the same two forwarding paths, inside `rebits_fpu`. The paper uses a textbook
five-stage pipeline for its example. This unit has no Fetch stage (instructions
arrive on a port) and no Memory stage (`OP_LOAD` brings data in). So it has two
forwarding sources where a five-stage pipeline would have three.

## Module hierarchy

```
rebits_fpu               top: pipeline, decode, forwarding
├── fp_regfile           32 × 128-bit registers, 2 read / 1 write
├── fperr_file           FPERR32, FPERR64
├── fperr_bypass         FPERR forwarding to Decode
└── rebits_simd_add      4 × binary32 and 2 × binary64 lanes
    └── rebits_fpadd     sum + exact error, parameterised by EXP_W, MAN_W
rebits_pkg               FLEN, formats, opcodes, instr_t
```

`rebits_fpadd` can be used on its own. Its parameters select the format:

- `EXP_W=8, MAN_W=23` (the default) gives REBits-32;
- `EXP_W=11, MAN_W=52` gives REBits-64;
- `EXP_W=5, MAN_W=10` gives the 16-bit format of the worked example.

## Verification

Each module has a self-checking testbench in `tb/`. The testbenches print
`TB_RESULT checks=N failures=M` and stop.

| Testbench | What it checks |
|---|---|
| `tb_rebits_fpadd` | 16-bit worked example; the 2808064 + 100.125 example; ties, round-up, far alignment, zeros, NaN, infinity, overflow, subnormal inputs; 20 000 random binary32 cases against a double-precision model; 20 000 random binary64 cases against TwoSum; 20 000 random pairs of each format near the underflow and overflow limits |
| `tb_rebits_simd_add` | random packed additions, every lane, both precisions |
| `tb_fperr_file` | per-precision writes, read selection, reset, write timing |
| `tb_fperr_bypass` | source priority and precision matching |
| `tb_fp_regfile` | array model, reset, read-during-write |
| `tb_rebits_fpu` | whole unit at default parameters, against an instruction-level model |
| `tb_workload_sum` | the paper's summation kernels at N = 100,000, see below |

The reference models in `tb/fp_ref_pkg.sv` do not use the adder's method. For
binary64 they use the simulator's double arithmetic and TwoSum. For binary32 they
form the exact sum in double, then round it to float in software.

`tb_rebits_fpu` checks every write-back against the instruction-level model,
including its cycle. It runs three phases:

1. a random mix of scalar and packed instructions, with the mode bit toggling and
   dependent instructions back to back;
2. the summation kernel above, with 4000 values, the first three quarters large and
   the last quarter small, and a fold every 100 iterations. The REBits float result
   must be closer to the exact sum than a plain float sum. In a typical run the
   REBits result is within one float ulp of the exact value, while the plain sum is
   off by about 16 ulps;
3. 500 double-double additions in the Figure 15 form. They must equal the classic
   software double-double addition bit for bit.

The testbench also counts how often each mechanism occurred and fails if one never
did: forwarding from Execute and from Writeback, mode bit off, restore, round-up,
far alignment, both precisions, packed operation.

`tb_workload_sum` runs the positive-number summation at the paper's cached-data
size, N = 100,000, on the whole unit at default parameters. The first three
quarters of the values are drawn from [2^29, 2^30) and the last quarter from
[2^10, 2^20). Six variants run side by side in one instruction stream:

- Native-32, a plain float sum;
- Native-64, a plain double sum using the 64-bit adder;
- REBits-32 with the error folded in never (only once at the end), every 1000,
  every 100, and every iteration;
- a 2-norm sum (Figure 6 of the paper). The squares are rounded to float in the
  testbench, because this unit only adds.

Every final register is compared bit for bit with the instruction-level model. The
testbench then checks the accuracy claims: every REBits variant beats Native-32, and
folding at least every 1000 iterations lands within one float ulp of the exact sum.
A typical run gives a relative error of 6.5e-5 for Native-32 and 2.8e-9 for every
REBits-32 variant. The 2-norm relative error falls from 7.3e-7 to 1.8e-8. The
paper's streaming size, N = 10^8, would take about a hundred times longer than
N = 100,000 (roughly 2.3 × 10^9 cycles) and is not simulated.

To run a testbench with Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_rebits_fpu \
    rtl/rebits_pkg.sv tb/fp_ref_pkg.sv rtl/rebits_fpadd.sv rtl/rebits_simd_add.sv \
    rtl/fp_regfile.sv rtl/fperr_file.sv rtl/fperr_bypass.sv rtl/rebits_fpu.sv \
    tb/tb_rebits_fpu.sv
./obj_dir/Vtb_rebits_fpu
```

For a single block, name the testbench with `--top-module` and list the
package(s), the block and its testbench, for example
`--top-module tb_rebits_fpadd rtl/rebits_pkg.sv rtl/rebits_fpadd.sv tb/tb_rebits_fpadd.sv`.
`tb_rebits_simd_add`, `tb_rebits_fpu` and `tb_workload_sum` also need
`tb/fp_ref_pkg.sv`, right after `rtl/rebits_pkg.sv`.

## Where this design departs from, or goes beyond, the paper

The paper specifies the adder's method, FPERR and its semantics, per-precision
FPERR registers, packed FPERR, the bypass case and the mode bit. Everything else
below was chosen here.

- **Rounding.** Only round-to-nearest-even is built, for the reason given above.
- **Subnormals** are flushed, as stated above. The paper does not handle them
  either.
- **Datapath width.** The paper's flow chart uses a 26-bit window with 3 guard bits
  and keeps B' aside. This design uses one (2P+2)-bit word, which yields the same
  exact result with a single adder. In the flow chart, the round-up case takes the
  two's complement of R' alone; here the two's complement is taken of the whole
  remainder (R' followed by B'). That is the exact error.
- **The paper's adder** was built on an existing open-source 32-bit adder. This one
  is written independently and does not reproduce that adder's interface or
  multi-cycle timing.
- **Pipeline.** There are three stages and 32 registers of 128 bits. The opcodes,
  the move-to-FPERR restore instruction, the zeroing of upper lanes by scalar
  instructions, and the reset values (all zero) are this design's choices.
- **Not built:**
  - renaming of FPERR for out-of-order cores. The paper extends the rename table so
    that every `fpadd` allocates a new physical FPERR; that needs an out-of-order
    core, which is not part of this design;
  - power gating behind the mode bit; only its logical effect is built;
  - REBits for multiplication, which the paper leaves to future work.
- **Workloads.** The unit performs only the additions of the workloads the paper
  evaluates. Multiplication, division and the elementary functions they also need
  belong to the rest of the FPU.
