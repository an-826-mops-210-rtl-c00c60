# A 128-bit unum {4,5} ALU and its test chip

This is SystemVerilog for an arithmetic unit that computes with **unums**.
Unums are a variable-width number format that records in the number itself
whether the value is exact. A unum looks like a float, with a sign, an
exponent and a fraction. A tag after it gives:

- the exponent size `es` and the fraction size `fs` actually used;
- a **ubit**. When the ubit is set, the number is not the point `x` but the
  open interval just beyond it, `(x, x+ulp)`.

Two unums can form a **ubound**: an interval with a lower and an upper end,
each of which can be open or closed. This replaces rounding. An addition
whose exact result does not fit is never rounded silently. It returns an
interval that is known to contain the true result.

The ALU works in the {4,5} environment: es is 1..16 and fs is 1..32.
It has four operations:

| op | code | what it does |
|---|---|---|
| ADD | 0 | op1 + op2, on unums, ubounds or any mix; the result is then compressed losslessly |
| SUB | 1 | op1 − op2, likewise |
| OPT | 2 | *optimize*: lossless compression of op1 to the fewest es+fs bits |
| UNIFY | 3 | *unify*: lossy merge of the ubound op1 into one unum where one can hold it |

Two bound adders run side by side, one for each end of a ubound. So the ALU
does two unum additions per clock in steady state. It is pipelined in two
stages and accepts one operation every cycle.

Around the ALU sits a small **test-bed**, as it would be on a test chip:

- an instruction memory of 1024 words;
- a register file of 128-bit registers;
- a control state machine that streams the program through the ALU, once
  or repeatedly;
- a memory controller that lets an outside tester load programs and
  operands and read results back.

## Source map

| file | module | role |
|---|---|---|
| `rtl/unum_pkg.sv` | package | types, encodings, shared format functions |
| `rtl/unum_expand.sv` | `unum_expand` | brings an operand to es=16, fs=32 |
| `rtl/unum_add_control.sv` | `unum_add_control` | operand routing, rounding directions, special cases |
| `rtl/unum_fp_add.sv` | `unum_fp_add` | one bound adder (floating-point add with inexact detection) |
| `rtl/unum_pack.sv` | `unum_pack` | writes the adder result back in register format |
| `rtl/unum_ubound_adder.sv` | `unum_ubound_adder` | control + two bound adders + pipeline register + pack |
| `rtl/unum_optimize.sv` | `unum_optimize` | lossless compression |
| `rtl/unum_unify.sv` | `unum_unify` | lossy merge of a ubound |
| `rtl/unum_alu.sv` | `unum_alu` | the ALU |
| `rtl/instr_mem.sv` | `instr_mem` | 1024 × 17 instruction memory (synchronous array) |
| `rtl/unum_regfile.sv` | `unum_regfile` | 32 × 128 register file |
| `rtl/testbed_ctrl.sv` | `testbed_ctrl` | program sequencer with hazard stall |
| `rtl/mem_ctrl.sv` | `mem_ctrl` | command decoder for the tester port |
| `rtl/unum_chip.sv` | `unum_chip` | top level |

Every file opens with a comment on what it does, how, its ports and its
timing.

## Number format

### The value of a unum

A unum is `s | e (es bits) | f (fs bits) | u | es-1 (4 bits) | fs-1 (5 bits)`.
With `bias = 2^(es-1) - 1` its value is:

```
e != 0 :  (-1)^s · 2^(e-bias) · (1 + f/2^fs)      normal
e == 0 :  (-1)^s · 2^(1-bias) · (f/2^fs)          subnormal
```

The ulp is `2^(exponent - fs)`. It therefore depends on the fs the unum
carries, not on the environment. There are two reserved patterns, both at
es=16, fs=32 with all bits of e and f set:

- positive or negative infinity when u = 0;
- NaN when u = 1.

The largest finite magnitude, *maxreal*, is the all-ones pattern minus one
ulp with u = 0. The same pattern with u = 1 is the interval
`(maxreal, inf)`.

Any value has many encodings. For example, 1.0 can be written with any es
and any fs. This is why *optimize* exists.

### Register layout

Registers hold unums **unpacked** in fixed slots, so that no hardware has to
parse a variable-width field. One slot is 64 bits (MSB first):

```
63  62  61   60   59   58    57..42   41..10    9    8..5   4..0
dc  s   NaN  Inf  =0   2nd   e[16]    f[32]     u    es-1   fs-1
```

- `NaN`, `Inf` and `=0` are *summary bits*: precomputed flags that spare
  every unit from decoding special values.
- `2nd` marks a register that holds a ubound.
- `e` and `f` are stored **right-aligned**: only the low `es` and `fs` bits
  are meaningful, and the rest are zero.

A 128-bit register holds either:

- a single unum in bits [63:0] with 2nd = 0 (the upper half is ignored); or
- a ubound, with the lower end in [63:0] carrying 2nd = 1 and the upper end
  in [127:64].

Results of ADD and SUB are written back at es=16, fs=32 and then
optimized. So in practice every result carries the smallest es and fs that
hold it.

### What the ubit means in each position

The ubit means different things in a single unum and in a ubound, and
every unit depends on this:

- **Single unum, u = 1**: the open interval `(x, x+ulp)`, beyond x in
  magnitude. For negative x this is `(x-ulp, x)`.
- **Ubound end, u = 1**: that end is *open*. The end value itself is the
  exact number stored. An open infinite end such as `(5, inf)` is stored as
  the infinity pattern with u = 1 and the summary bits Inf = 1, NaN = 0.
  This is what tells it apart from NaN, which has the same e and f bits.

## The data path

```
 op1 ─┬─► Expand 1 ─┬───────────────────────┐
      │             ▼                       ▼
      │        ubound adder ──[reg]──► Pack ─► mux ─► Optimize ─┐
 op2 ─┼─► Expand 2 ─┘               (expanded op1 for OPT) ─────┘ │
      │                                                           ▼
      └─► Unify ──────────────────────────────────────────► mux ─[reg]─► result
```

### Expand

The adder sees only one format. Each bound of each operand is re-encoded at
es=16, fs=32:

- the exponent is re-biased to 32767;
- the fraction is moved to the top of the 32-bit field;
- subnormals of narrower environments are normalised, which is always
  possible at es=16.

This loses nothing.

The subtle case is an **inexact single unum**. Its meaning, `(x, x+ulp)`,
depends on its own fs. Widening the fraction would shrink the ulp and change
the value. So Expand turns it into an explicit ubound with both ends open:

- `(x, x+ulp)` for positive x;
- `(x-ulp, x)` for negative x;
- an inexact zero `(0, ulp)` of a narrower environment uses
  `ulp = 2^(1-bias-fs)` of that environment;
- an upper end beyond maxreal becomes an open infinity.

From here on, "operand x is a ubound" (b1 and b2 below) includes such
converted unums.

### Ubound adder

The two operands are `(a,b)` and `(c,d)`; a single unum is just `a` or `c`.
The control block routes endpoints to the **lower-bound (LB)** and
**upper-bound (UB)** adders:

| b2 b1 | add | sub |
|---|---|---|
| 0 0 | a+c (single result) | a−c (single result) |
| 0 1 | (a+c, b+c) | (a−c, b−c) |
| 1 0 | (a+c, a+d) | (a−d, a−c) |
| 1 1 | (a+c, b+d) | (a−d, b−c) |

Each bound adder is a floating-point adder with a hidden bit:

- it aligns with guard, round and sticky bits, which tells it exactly
  whether the true sum fits in 32 fraction bits;
- it normalises, including into the subnormal range of the 16-bit exponent;
- if the sum does not fit, it rounds and reports *inexact*.

The rounding direction comes from the bound's role:

- **LB** rounds toward −∞ and **UB** toward +∞, so the interval always
  contains the true result. A rounded end is open.
- A **single** result truncates the magnitude. With the ubit set, it then
  names the one cell `(x, x+ulp)` that holds the true sum.

A result end is open if either of the two endpoints that made it was open
(OR of the ubits) or if its adder was inexact.

**Overflow.** A magnitude beyond maxreal becomes:

- an open infinity when the bound was rounded away from zero (a lower bound
  below −maxreal, or an upper bound above +maxreal);
- open ±maxreal otherwise.

A single result that overflows becomes `(maxreal, inf)`.

**Special operands** are decided from the summary bits before the adders:

- NaN in gives NaN out.
- +∞ + −∞ gives NaN when both are closed.
- A closed infinity wins over an open one.
- Two open infinities of opposite sign give an open −∞ for the lower end and
  an open +∞ for the upper end.

The control passes 9 special bits to Pack. For each bound these are:
special, NaN, inf and sign. The ninth bit is "the result is a ubound".

### Optimize (lossless)

For each finite bound, the unit tries all 16 exponent sizes in parallel,
with normal and subnormal encodings:

- the needed fs follows from the trailing zeros of the fraction;
- the encoding with the smallest `es + fs` wins, and ties go to the smaller
  es.

An inexact single unum keeps its fs, because that fixes its ulp; only its es
may shrink.

A ubound that is in fact one unum is stored as that unum. This covers two
cases:

- both ends are the same closed point;
- both ends are open and exactly one ulp apart at some fs.

NaN and infinities pass through unchanged.

Optimize runs after every ADD and SUB, and also on its own opcode (OPT).

### Unify (lossy)

Unify takes operand 1 straight from the register and expands it itself.
Its input is a ubound `[lo, hi]` with any mix of open and closed ends. It
looks for the single inexact unum whose interval contains the whole ubound
and is as narrow as possible.

A unum's interval can only take a few shapes. Unify tries them from narrow
to wide and takes the first that fits. For a negative interval it works on
magnitudes.

1. **A normal cell `(x, x+ulp)` in the binade of `lo`.**
   - For each fs from 1 to 32, `x` is `lo` cut to fs fraction bits.
   - The cell fits if it contains both ends, with care at each open or
     closed edge.
   - The largest fs that fits wins. `x` is encoded with the smallest es that
     holds its exponent as a normal number.
2. **A whole binade `(2^k, 2^(k+1))`.**
   - With fs ≥ 1 a normal cell is at most half a binade wide. So an interval
     such as `[1.25, 1.75]` needs the cell `(1, 2)`.
   - The only unum with that interval is a subnormal with fraction 1 and
     ulp `2^k`.
   - This exists only when `k = 1 - bias - fs` for some es and fs. Across
     all es this set of k has gaps.
3. **A cell from zero, `(0, 2^k)`.**
   - This is an inexact zero, with the same set of possible k.
   - The smallest k that reaches beyond `hi` wins.
   - It holds intervals that touch zero with an open end there, and
     intervals spanning several binades.
4. **`(maxreal, inf)`**, for the interval from an open maxreal to an open
   infinity, and the mirror of that on the negative side.

A ubound whose ends are the same closed point becomes that exact unum.

The result of a merge is marked inexact, because the unum may cover more
than the ubound did. Unify is the only lossy operation, and it runs only on
its own opcode.

**Left unchanged.** These operands come back as they went in:

- single unums and NaN;
- intervals that cross zero;
- intervals with a closed end at zero;
- intervals that span more than one binade and reach above 1, since the
  widest inexact zero is `(0, 1)` (es = 1, fs = 1);
- intervals with an infinite end that do not start at maxreal.

No unum holds any of these. One corner is left out: a lower end that is
subnormal even at es=16, below 2^-32766, is matched only against cells of
kind 3.

### Pipeline and timing

There are two register stages:

1. behind the two bound adders, inside `unum_ubound_adder`;
2. at the ALU output.

An operation issued with `valid_i` in cycle t appears with `valid_o` in
cycle t+2. OPT and UNIFY take the same latency, so results never reorder.
The ALU has no stall input and takes one operation every cycle.

## The test-bed

### Instructions

Instructions are 17 bits: `{op[2], rd[5], rs1[5], rs2[5]}`, with op coded as
in the table at the top. OPT and UNIFY use only rs1. The program lives at
addresses 0..N of the instruction memory.

### Sequencer (`testbed_ctrl`)

Each cycle the sequencer:

1. fetches one instruction (the memory read is synchronous);
2. reads the two source registers combinationally and issues to the ALU;
3. writes the ALU result to `rd` two cycles later.

There is no forwarding. If a source register is the destination of one of
the (at most two) instructions still in the ALU, the instruction waits:
`stall_o` is high, and the same address is fetched again until the write
has happened.

- In **once** mode the run ends after the last instruction has drained, and
  `busy_o` falls.
- In **repeat** mode the program wraps from the last address back to 0 until
  a STOP command. It then finishes the pass it is in.

### Command port (`mem_ctrl`)

The tester drives `cmd_i = {op[3], addr[10], data[128]}` with a valid/ready
handshake:

| op | command | effect |
|---|---|---|
| 0 | NOP | none |
| 1 | IMEM_WR | instruction[addr] ← data[16:0] |
| 2 | IMEM_RD | response: instruction[addr], zero-extended |
| 3 | RF_WR | register[addr] ← data |
| 4 | RF_RD | response: register[addr] |
| 5 | RUN | run instructions 0..addr; repeat while data[0] = 1 |
| 6 | STOP | end a repeated run at its next wrap |

A read answers one cycle after it is accepted, with `rsp_valid_o` high for
one cycle. While a program runs, only STOP is accepted. The instruction
memory belongs to the memory controller when idle and to the sequencer while
running. The register file has its own external port, which is used only
while idle.

## Where this design departs from, or adds to, the published chip

The published chip's block structure, widths, operation set and register
layout are followed. Much was not specified and is this design's own choice:

- **Placement of e and f in the 64-bit slot.** They are right-aligned. The
  published layout gives the field widths but not the alignment.
- **Open/closed semantics.** The published chip ORs the operand ubits to get
  a bound's type. The rest is this design's:
  - the expansion of inexact singles into open ubounds;
  - directed rounding per bound;
  - the overflow rules and the special-case table.
- **Optimize cost.** The cost is es+fs, and collapsing a ubound that is
  really one unum into a single unum is this design's reading of "smallest
  representation".
- **Unify.** The order of candidate cells and the tie-breaking are this
  design's. So is the corner left out for ends below 2^-32766.
- **Pipeline.** There are two stages as published. The published block
  diagram draws its two cuts through the middle of the bound adders and
  through the middle of the unify and optimize units. Those cuts were then
  moved by retiming, so their final positions are unknown. Here the
  registers sit behind the bound adders and at the ALU output. A
  retiming synthesis flow can move them.
- **Right-bound flag.** In the upper half of a ubound, the position of the
  `2nd` flag is don't-care in the published layout. This design writes 0
  there and never reads it.
- **Test-bed.** The published chip has:
  - a 1024-instruction memory;
  - a register file;
  - a control state machine that runs the program once or repeatedly;
  - a memory controller reached by commands.

  The following are this design's:
  - the instruction format;
  - the register count (32);
  - the hazard stall;
  - the command set;
  - the parallel command port, in place of the chip's unspecified pad-level
    I/O.

  The instruction memory is a flip-flop/RAM array that a synthesis flow
  would map to an SRAM macro.
- **Not built.** Two parts are not built:
  - the pad ring and clocking, which the tester provides;
  - any multiplier. The published ALU has none either, so workloads built
    on multiply-add (such as axpy) cannot run on this chip as such.
- **Not reproduced.** Speed, area and power (about 413 MHz add/sub,
  470 MHz unify/optimize, 50 kGE in 65 nm) depend on the implementation
  flow. They are not claimed for this RTL.

## Verification

Each block has a self-checking testbench in `tb/`. The reference values are
computed with real arithmetic straight from the format's definition
(`tb/tb_unum_ref.sv`), independently of the RTL package functions.

| testbench | what it covers |
|---|---|
| `tb_unum_expand` | random unums of es up to 8 and every fs, normal and subnormal, exact and inexact, specials |
| `tb_unum_fp_add` | directed-random sums in all three rounding modes, with exactness and bracket checks |
| `tb_unum_add_control` | the full routing table and the special-case rules |
| `tb_unum_pack` | overflow and special results |
| `tb_unum_ubound_adder` | random unum/ubound mixes; the result must contain the true interval, be tight, and appear one cycle later |
| `tb_unum_optimize` | value preserved, no more bits than the smallest encoding over all es and fs, ubound collapse |
| `tb_unum_unify` | containment, and against a reference search over every cell shape: the result is the narrowest cell; cases left unchanged |
| `tb_unum_alu` | all four operations back to back, with the latency of 2 checked |
| `tb_instr_mem`, `tb_unum_regfile`, `tb_mem_ctrl` | the test-bed memories and command decoding |
| `tb_testbed_ctrl` | sequencing, stalls, once and repeat modes |
| `tb_unum_chip` | the whole chip at its default sizes, driven only through the command port |
| `tb_unum_chip_prog` | a 1024-instruction random program run twice through the chip; bit-exact against a one-at-a-time interpreter, every instruction checked with real arithmetic, one issue per cycle apart from stalls |

`tb_unum_chip` loads operands and a program, runs it, reads every result
back and checks it. It then runs a repeated accumulation and stops it. It
counts, and requires at least once, each of these: an exact sum, an inexact
sum, a ubound result, compression, overflow, an infinity operand, unify, an
explicit optimize, a repeat-mode wrap and a hazard stall.

Every testbench ends with a line
`TB_RESULT checks=<n> failures=<m>` and has a cycle watchdog.

### Running a testbench with Verilator

From the repository root, for example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/unum_pkg.sv tb/tb_unum_alu.sv --top-module tb_unum_alu -o tb_unum_alu
./obj_dir/tb_unum_alu
```

Replace `tb_unum_alu` with any testbench name. The package must come first.
The `-y` options let Verilator find the other modules by file name. All
testbenches finish within a few minutes. Most take seconds.

## Changing the design

- Shared types and functions live in `unum_pkg`. A format change, such as
  other slot positions, touches mainly that package, `unum_expand` and
  `unum_pack`.
- `unum_chip` exposes `IMEM_DEPTH` and `NREGS`. The ALU width is fixed at
  128 by the format and checked when the design is elaborated.
- The data path is combinational between the two registers. To add pipeline
  stages, put them inside `unum_ubound_adder` (before Pack) or in
  `unum_alu`. Then change `testbed_ctrl`'s hazard window (it tracks two
  instructions in flight) to match.
