# Soft SIMD shift-add pipeline with CSD multipliers and format repacking

Quantized machine-learning kernels multiply many small numbers by the same
weight, and the best bit width changes from layer to layer. A hardware SIMD
unit fixes its lane widths in silicon: a 3 x 16-bit unit running 4-bit data
wastes three quarters of every lane. *Soft SIMD* instead treats one 48-bit
word as a row of equal sub-words whose width software picks per instruction
-- 12 x 4, 8 x 6, 6 x 8, 4 x 12 or 3 x 16 bits -- and makes the arithmetic
respect the chosen boundaries. This RTL implements the two-stage Soft SIMD
pipeline of Yu, Levisse, Ansaloni, Atienza, Gupta, Timon and Catthoor, "A
Soft SIMD Based Energy Efficient Computing Microarchitecture":

* **Stage 1** multiplies every sub-word by one scalar multiplier, not with a
  multiplier array but as a sequence of *shift right, then add or subtract*
  steps on an accumulator. The multiplier is recoded to Canonical Signed
  Digit (CSD) form, so about two thirds of its digits are zero, and a zero run
  of up to two digits costs no extra cycle: one step shifts by up to 3.
* **Stage 2** is a bit crossbar that repacks data from one sub-word width to
  another, between computation phases that use different precisions.

All values are signed Q1.x fractions (one integer bit, the rest fraction).
A product has the width of its multiplicand; the bits shifted out are
truncated.

## Sub-word boundaries: the V mask

Everything format-dependent comes from one 48-bit mask, `V`: `V[n] = 0` where
bit `n` is the most significant bit of a sub-word and `1` elsewhere
(`simd_pkg::v_mask`). Because 4, 6, 8, 12 and 16 all divide 48, bit 47 is a
sub-word MSB in every format.

**Adder (`simd_adder`).** A ripple adder whose carry logic is altered only
at sub-word MSBs. With generate `g = a&b` and propagate `p = a^b` per bit,
the MSB bit uses `p = 0` and a `g` chosen by the operation:

| operation | `g` at a sub-word MSB | effect on the next sub-word |
|-----------|-----------------------|-----------------------------|
| `a + b`   | 0                     | no overflow leaks upward     |
| `a - b`   | 1                     | receives the `+1` of its two's complement `a + ~b + 1` |

The carry into bit 0 is `sub`, which supplies the `+1` of the lowest
sub-word. Every sub-word thus wraps modulo 2^w on its own, and the cost over
a plain adder is one small mux per bit in the generate logic; the carry
chain itself keeps its length.

**Shifter (`simd_shifter`).** A row of 1-bit muxes: bit `n` takes bit
`n+1`, except at a sub-word MSB where it keeps its own value, which is the
arithmetic shift's sign extension. Three rows are cascaded; row `k` is
enabled when `shamt > k`, giving shifts of 0 to 3. Bit positions that are a
sub-word MSB in no supported format would need no mux in a gate-level
implementation; the RTL writes the mux for every bit and leaves the pruning
to synthesis (the mask is constant per format).

## Multiplication in stage 1

### CSD recoding (`csd_encoder`)

A CSD number has digits 0, +1 and -1 with no two non-zero digits next to
each other. The 16-bit two's complement multiplier (Q1.15) is recoded by the
carry form of Reitwiesner's method, with `x` sign-extended by one bit:

```
c[0]   = 0
c[i+1] = majority(x[i], x[i+1], c[i])
d[i]   = x[i] + c[i] - 2*c[i+1]          (one of -1, 0, +1)
```

This gives 16 digits of the same value, non-adjacent (it equals the
non-adjacent form, which is unique). A multiplier of fewer bits is placed in
the top bits of the 16-bit field (Q1.Y left-aligned into Q1.15); its low
zero digits are skipped at no cost. Digit code: `00` = 0, `01` = +1,
`11` = -1.

### Step sequence (`csd_sequencer`)

With digits `d[15]` (weight 1) down to `d[0]` (weight 2^-15), the product is
evaluated Horner-style from the least significant non-zero digit `d[k]`:

```
acc = d[k] * X                                      first step, shifter input = 0
for each next non-zero digit d[j], j > k:
    acc = (acc >> (j - k)) + d[j] * X               one step if j - k <= 3
finally acc = acc >> (15 - top non-zero position)
```

`>>` is the per-sub-word arithmetic shift and `+` the per-sub-word
add/subtract of stage 1. A step shifts by at most 3, so a gap of `g`
positions costs `ceil(g/3)` steps, the extra ones being *shift-only* steps
that add 0. Trailing zeros before the first non-zero digit cost nothing,
because the accumulator is still zero. The cycle count of one
multiplication is therefore

```
cycles = 1 + sum over gaps g between neighbouring non-zero digits of ceil(g/3)
           + ceil((15 - top) / 3)          (1 for a zero multiplier)
```

and it is the same for every lane and every format.

**Worked example.** Multiplicands 0.4921875 and -0.5 in 8-bit lanes
(`0x3F`, `0xC0`), multiplier 0.8984375 (`0111_0011`, CSD
`1 0 0 -1 0 1 0 -1`). Four steps: `-X`; `>>2, +X`; `>>2, -X`; `>>3, +X`.
Results `0x38` = 0.4375 and `0xC6` = -0.453125, about 1 % off the exact
products because every shift truncates. Both testbenches of the datapath
and of the top check this example, including its four cycles.

Floor division composes (`(v >> a) >> b == v >> (a+b)`), so the truncation
of a product depends only on the digit positions, not on how the steps are
grouped. Each addition wraps within the lane: like any fixed-width Q1.x
arithmetic, a partial sum beyond [-1, 1) overflows (e.g. -(-1.0)).

## Repacking in stage 2 (`data_pack`)

The two stage-2 registers R2 and R3 are read as one list of sub-words in
the input format: R2's sub-words from bit 0 upward, then R3's. The output
word, in the output format, holds `48 / w_out` consecutive entries of that
list, starting at entry `part * (48 / w_out)`. Each value keeps its Q1
meaning: it is aligned on its MSB, so widening appends zeros below and
narrowing drops low bits. There is no arithmetic: each output bit is a wire
from one input bit, or a constant 0, per conversion, and a mux picks the
conversion.

Supported conversions (input width -> output width):

| in \ out | 4 | 6 | 8 | 12 | 16 |
|----------|---|---|---|----|----|
| 4        |   | x | x |    |    |
| 6        | x |   | x | x  |    |
| 8        | x | x |   | x  | x  |
| 12       |   | x | x |    | x  |
| 16       |   |   | x | x  |    |

These are exactly the pairs whose widths differ by at most a factor of two,
which is why two input registers suffice: narrowing (e.g. 16 -> 8) fills one
output word from R2 and R3 together with `part = 0`; widening (e.g. 8 -> 16)
spreads one input word's values over two output words, `part = 0` and
`part = 1`. Equal input and output formats pass R2 (`part = 0`) or R3
(`part = 1`) through. Any other pair returns 0 and `supported = 0`.

## The pipeline (`soft_simd_datapath`)

```
            +----+                      stage 1                stage 2
MEM ---+--->| R1 |---+                +---------+       +----+
       |    +----+   +--> M mux ----->|         |--+--->| R2 |---+   +-----------+
       +-------------+                |  adder  |  |    +----+   +-->| data pack |--+
       |                              |         |  +--->| R3 |------>|           |  |
       +--> S mux --> shifter ------->|         |  |    +----+       +-----------+  |
   0 ----->  ^                        +---------+  |                                 |
             |        +----+                       +--> R4 mux <---------------------+
             +--------| R4 |<---------------------------+                            |
                      +----+                       adder/pack --> write-back mux --> MEM
```

* S (shifter input): 0, memory read data, or R4 (the accumulator).
* M (multiplicand): R1 or memory read data; forced to 0 for a shift-only step.
* The adder output can go to R2, R3, R4 or straight to memory. Writing it to
  R4 or memory skips stage 2 entirely: this is the stage-2 bypass for
  results that need no format change.
* R4 can also take the data pack output, and the write-back mux chooses the
  adder or the data pack.

Each cycle's datapath control is one `dp_ctrl_t` struct (`simd_pkg`). All
registers reset to zero (asynchronous, active-low `rst_n`). Memory read data
is used in the cycle it is presented; write data and enable are
combinational and are taken by the memory at the clock edge.

## Control: `soft_simd_top`

The original description gives the datapath but no control interface, so
the top level adds a small instruction set of this design's own, on a
valid/ready handshake (`simd_pkg::instr_t`):

| op         | effect | cycles |
|------------|--------|--------|
| `OP_LD_R1` | R1 <= MEM[addr] | 1 |
| `OP_MUL`   | dst <= multiplicand x `mult` (CSD steps, format `fmt`); the multiplicand is R1 or MEM[addr] (`a_sel`) | formula above |
| `OP_SHADD` | dst <= (S >> `shamt`) op M, one raw stage-1 step | 1 |
| `OP_PACK`  | dst <= repack(R2, R3, `fmt` -> `fmt_out`, `part`) | 1 |

`dst` is R4, R2, R3 or MEM[addr] (`OP_PACK` only has R4 and memory paths;
R2/R3 as its destination write nothing). During `OP_MUL`, `in_ready` is low
until the last step, so the instruction stream stalls; R4 holds the partial
product. `done` pulses in the cycle an instruction writes its result;
`pack_error` flags a repack request the crossbar does not wire (zero is
written). The memory port has a 10-bit word address (`simd_pkg::ADDR_W`).

Instructions execute one at a time. The two stages are separate hardware and
R2/R3 carry data between them, but stage 2 of one instruction does not run
in the same cycle as stage 1 of another.

## How far this follows the published design

Taken from the publication: the 48-bit datapath; the five sub-word widths;
the two-stage structure with registers R1-R4 and their muxes; the adder slice
that blocks carries in additions and injects +1 in subtractions; the
mux-based sign-extending shifter and its cascading; CSD multipliers processed
LSB first with shifts of up to three positions; Q1.x operands with truncated,
same-width results; the table of supported repacking modes.

Choices of this implementation, where the description is silent:

* the select of the adder slice's mux (the subtract signal) and inverting
  the second operand inside the adder;
* CSD recoding in hardware, its algorithm and digit code;
* handling of zero runs longer than the shifter's reach (shift-only steps)
  and skipping trailing zeros in the first step;
* the zero input of the shifter mux;
* the value mapping of the repacking crossbar (MSB alignment, R2-then-R3
  order, `part` select) and its behaviour for unsupported pairs;
* the instruction set, handshake, memory port and its timing, reset, and the
  one-instruction-at-a-time issue.

Not included: the memory banks themselves (size and timing are not given;
the top exposes the port), the hard-SIMD comparison designs, and anything
about the 28 nm implementation (area, energy, layout).

## Files

| file | content |
|------|---------|
| `rtl/simd_pkg.sv` | widths, format and digit enums, control struct, instruction word, V mask |
| `rtl/simd_adder.sv` | boundary-aware adder/subtractor |
| `rtl/simd_shifter.sv` | boundary-aware arithmetic right shift 0..3 |
| `rtl/csd_encoder.sv` | two's complement to CSD |
| `rtl/csd_sequencer.sv` | CSD digits to shift/add steps |
| `rtl/data_pack.sv` | repacking crossbar |
| `rtl/soft_simd_datapath.sv` | registers, muxes, both stages |
| `rtl/soft_simd_top.sv` | instruction control around the datapath |
| `tb/tb_ref_pkg.sv` | integer reference model shared by the testbenches |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_mul_sweep.sv` | multiplication over every sub-word width x multiplier width 1..16 |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops; each has a
watchdog. The references in `tb_ref_pkg` are computed lane by lane on
integers, with the CSD digits from the textbook non-adjacent-form loop, so
they share no code with the RTL. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/simd_pkg.sv tb/tb_ref_pkg.sv tb/tb_soft_simd_top.sv \
    --top-module tb_soft_simd_top
./obj_dir/Vtb_soft_simd_top
```

Replace `soft_simd_top` by another module name for its unit test.
`tb_soft_simd_top` runs the design at its default configuration: the worked
example, then 400 random scenarios (multiplications in all formats with
multipliers of 1 to 16 bits, to memory, in place, into R4, into R2/R3 followed
by a repack in every format pair, and raw shift-add steps). It checks every
result against the reference, every multiplication's cycle count against the
formula above, and that each mechanism occurred: stalls, zero-skipping steps,
shift-only steps, subtractions, stage-2 bypass writes, repacks, rejected
repacks and format switches. `tb_csd_encoder` is exhaustive over all 65536
multipliers.

`tb_mul_sweep` covers the grid of sub-word widths (4 to 16 bits) and
multiplier widths (1 to 16 bits), 12 random multiplications per point, and
prints for each point the average cycles per multiplication and the lane
products per cycle. With CSD zero-skipping the cycle count follows the
number of non-zero multiplier digits rather than the multiplier's width: a
random 4-bit multiplier takes about 2.2 cycles, a random 16-bit one about
7.5, and a 1-bit one a single cycle in every format.
