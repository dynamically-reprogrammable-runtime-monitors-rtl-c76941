# A programmable hardware monitor for bounded-time MTL

This is a runtime-verification monitor built as fixed logic that can sit on the same die as the
system it watches. In every clock cycle it takes one *event*: the values of up to `N_AP` Boolean
signals, called atomic propositions (APs). In every cycle it also emits one *verdict*: whether a
formula of discrete-time, bounded Metric Temporal Logic (MTL) held at an event a fixed number of
cycles earlier. The formula is not built into the circuit. The monitor is a small array of
identical processing elements and result queues joined by crossbars, and a program image shifted
in through an 8-bit port chooses the formula. Changing the formula means sending a new image,
which takes about a hundred cycles at the default size. No re-synthesis is needed.

The RTL follows the published architecture of a reprogrammable MTL monitor (PEs, Ques and four
crossbars). Its default size is the largest configuration reported for that architecture: 16 PEs,
16 Ques, 16 APs and 256-cell Ques. Where the published description leaves a detail open, this
design makes its own choice. Each choice is marked below and in the header comment of each file.

## The logic being monitored

Formulas are built from APs with `not`, `or`, `and`, `implies`, next (`X`) and three timed
operators over a closed interval `[t1, t2]` of future steps:

* `[]_[t1,t2] a` (box) holds at step i if `a` holds at every step from i+t1 to i+t2;
* `<>_[t1,t2] a` (diamond) holds if `a` holds at one or more of those steps;
* `a U_[t1,t2] b` (until) holds if `b` holds at some step j in that window and `a` holds at
  every step from i up to j-1.

All bounds are finite. The verdict for step i therefore becomes final a bounded number of steps
later, and a streaming monitor can give it at a fixed latency.

## The core idea: a queue of partial verdicts

Every operator of the formula is evaluated by an *evaluator*: one queue ("Que") plus one or more
programmable machines that update it. The queue holds one cell per past step. Cell `k` holds
what is known so far about the operator's verdict for the step `k` cycles ago: `true`, `false`
or `Maybe` (not decided yet). In hardware a fourth code, `empty`, marks cells that hold nothing
yet.

Each cycle the queue does three things, in this order:

1. **add**: every cell moves up one place, and cell 0 becomes `Maybe`. This opens the verdict
   of the current step.
2. **modify**: the machine computes one Boolean result `res` from its operands (wire, not, or,
   and or implies). It then hands the queue an interval of cell indices: `I_T` if `res` is true,
   `I_F` if it is false. Every `Maybe` cell in that interval becomes `true` or `false`, matching
   `res`. Cells that are already decided are never touched. So a verdict, once written, stays.
3. **del**: cell `Head` leaves the queue. Its value goes to the next operator up the tree, or
   to the verdict pin.

What the current operand value says about a past step `k` cycles back is written into cell `k`.
This is the whole trick. Take `<>_[1,4] s`. If `s` is true now, every step 1 to 4 cycles back is
satisfied, so `I_T = [1,4]`. If `s` is false now, only the step exactly 4 cycles back loses its
last chance, so `I_F = [4,4]`. Steps 1 to 3 cycles back are still `Maybe` at that point, and a
later true value will settle them. Once a cell reaches index `t2 + 1`, it is settled.

### Evaluator recipes

`E` is the empty interval. "Head" is the smallest legal deletion position. An interval given as
`E` means the machine never modifies on that result.

| operator              | machines (opcode: operands)                     | `I_T`       | `I_F`           | Head   |
|-----------------------|-------------------------------------------------|-------------|-----------------|--------|
| `not a`               | not: a                                          | [0,0]       | [0,0]           | 1      |
| `a or/and/implies b`  | or / and / implies: a, b                        | [0,0]       | [0,0]           | 1      |
| copy (`a` delayed)    | wire: a                                         | [0,0]       | [0,0]           | 1      |
| `X a`                 | wire: a                                         | [1,1]       | [1,1]           | 2      |
| `[]_[t1,t2] a`        | wire: a                                         | [t2,t2]     | [t1,t2]         | t2+1   |
| `<>_[t1,t2] a`        | wire: a                                         | [t1,t2]     | [t2,t2]         | t2+1   |
| `a U_[t1,t2] b`, t1>0 | wire: a                                         | E           | [0,t1-1]        | t2+1   |
|                       | wire: b                                         | [t1,t2]     | [t2,t2]         |        |
|                       | or: a, b                                        | E           | [t1,t2-1]       |        |
| `a U_[0,t2] b`        | or: a, b                                        | E           | [0,t2-1]        | t2+1   |
|                       | wire: b                                         | [0,t2]      | [t2,t2]         |        |

Until is the only operator whose queue is written by more than one machine. Each line has a
simple reading:

* `a` false now kills every step whose window has not opened yet (`[0,t1-1]`).
* `b` true now satisfies every step whose window is open (`[t1,t2]`).
* `b` false now is the last chance lost for the step `t2` back.
* `a` and `b` both false kills every open window that still lacks a witness (`[t1,t2-1]`).

In one cycle these machines never write the same cell. Their same-polarity intervals always join
into one contiguous range. The PE2Q crossbar relies on both facts.

## Composing evaluators, and why Heads must be balanced

A formula is laid out along its syntax tree. Each operator gets its own Que. The value deleted
from a child's Que becomes an operand of the parent's machine. A value needs time to climb one
level of the tree. That time is `Head + 1 + IC_REGS` cycles:

* `Head` cycles to move from cell 0 to cell `Head`;
* one cycle in which the cell is visible on the Que output;
* one more if the crossbars have their input registers (`IC_REGS = 1`, the default).

An AP reaches a PE `IC_REGS` cycles after its event. So the verdict latency of a formula is
`IC_REGS + sum over the path of (Head + 1 + IC_REGS)`. All root-to-leaf paths must give the same
sum.

The two operands of a binary operator must describe the same step. If one subtree is slower, the
faster one must be held back. This is done by raising the `Head` of the faster child by the
difference. That child's verdicts then sit a few more cycles in its queue, where they no longer
change. The compiler works bottom-up:

    avail(AP)            = IC_REGS
    avail(operator n)    = max(avail of operands) + Head(n) + 1 + IC_REGS
    at a binary node:      Head(faster child) += avail(slower) - avail(faster)

An AP that is an operand of a binary node whose other operand is a subtree cannot be delayed
directly. It must be wrapped in a copy evaluator (`wire`, Head 1), which is then balanced like
any other child. The formula given to the compiler must contain that copy node.

Worked example, `<>_[0,1] !s1  or  <>_[1,4] s2`, with `IC_REGS = 0`. The `not` has Head 1, so
its result is ready 2 cycles after the event, and `<>_[0,1]` (Head 2) is ready at 5. The right
branch, `<>_[1,4]` with Head 5, is ready at 6. The left diamond's Head is raised to 3, and the
`or` (Head 1) gives the verdict for step t in cycle t + 8. With `IC_REGS = 1` the same formula
balances without any change (both branches ready at 8) and has latency 11.

A formula's first verdicts after programming refer to steps before the first monitored event.
Ignore the first `latency` verdicts.

## Hardware blocks

```
 ap[N_AP] --> AP2PE --> PE x N_PE --> PE2Q --> Que x N_Q --+--> Q2OUT --> verdict
                         ^                                 |
                         +------------- Q2PE <-------------+
 program_byte, write_en --> program loader --> configuration of all blocks
```

| file                  | block                                                                 |
|-----------------------|-----------------------------------------------------------------------|
| `mtl_pkg.sv`          | opcode and cell encodings, the Logic Unit function                     |
| `mtl_types.svh`       | struct typedefs (macros) for instructions and crossbar signals         |
| `mtl_pe.sv`           | Processing Element: operand muxes, Logic Unit, `I_T`/`I_F` mux         |
| `mtl_que.sv`          | Que: add / modify / del on `Q_SZ` two-bit cells                        |
| `mtl_ap2pe.sv`        | AP2PE crossbar, `N_AP` -> `2*N_PE`, optional input register            |
| `mtl_pe2q.sv`         | PE2Q crossbar with interval coalescing (min of `lo`, max of `hi`)      |
| `mtl_q2pe.sv`         | Q2PE crossbar, routed by each Que's reader fields, optional register   |
| `mtl_q2out.sv`        | Q2OUT, the verdict Que to the pin, optional register                   |
| `mtl_prog_loader.sv`  | byte-wide shift register holding the configuration                     |
| `mtl_monitor.sv`      | top level                                                             |

**Processing Element.** A PE is purely combinational. Each operand comes from the AP2PE crossbar
or from the Q2PE crossbar, as chosen by one bit per operand. The result picks `I_T` or `I_F`. The
PE sends that range to the PE2Q crossbar, together with the result itself (which says whether
`Maybe` cells become true or false), the destination Que and its `isActive` bit.

**Que.** A Que is `Q_SZ` two-bit cells with the next-state logic above. Cells above `Head` are
forced empty, because they have been deleted. The output is the stored cell `Head`, so a deleted
value is seen by the reader in the cycle after the deletion. Besides the value, the output
carries `readerPE`, `inp_no`, `isPEInput = isActive & ~isVerdict` and
`isVerdict = isActive & isVerdict`. An inactive Que stays empty.

**Crossbars.** All four crossbars are single-hop. PE2Q takes, for each Que and each polarity, the
hull of the non-empty ranges of the active PEs aimed at it. Q2PE and Q2OUT are routed by fields
of the Que's own instruction.

## Program image

The image is one packed struct, `mon_cfg_t` in `mtl_types.svh`. From its most significant bit:

    PE instructions  PE N_PE-1 .. PE 0     each 6 + ceil(log2 N_Q) + 4*ceil(log2 Q_SZ) bits
      {isActive, op0Src, op1Src, opcode[2:0], r_qid, I_T.lo, I_T.hi, I_F.lo, I_F.hi}
    Que instructions Q N_Q-1 .. Q 0        each 3 + ceil(log2 N_PE) + ceil(log2 Q_SZ) bits
      {isActive, isVerdict, readerPE, inp_no, Head}
    AP2PE selects    PE N_PE-1 .. PE 0, operand 1 then operand 0, ceil(log2 N_AP) bits each

Notes on the fields:

* `opSrc`: 0 is AP, 1 is Que.
* `opcode`: 000 wire, 001 not, 010 or, 011 and, 100 implies. Other codes act as wire.
* An interval with `lo > hi` is empty. That is how "never modify on this result" is written.

The image is padded with zero bits at the top to a whole number of bytes. It is sent most
significant byte first: one byte per cycle on `program_byte`, with `write_en` high. Sizes:

* the default monitor: 16×42 + 16×15 + 16×2×4 = 1040 bits, 130 bytes;
* a 4-PE, 4-Que, 8-AP, 16-cell monitor: 156 bits, 20 bytes.

While `write_en` is high every Que is held empty. The configuration is meaningless until the last
byte is in, and nothing is written to a Que meanwhile. The new formula is monitored from the
first cycle with `write_en` low. The events of that cycle are the formula's step 0 (with
`IC_REGS = 0` they are used at once; with `IC_REGS = 1` they are registered first).

`tb/mtl_tb_lib.svh` contains a small compiler written as SystemVerilog functions. It assigns PEs
and Ques, balances Heads and fills `mon_cfg_t`. It also contains a reference evaluator written
straight from the semantics above. It is the quickest way to produce images for other formulas.

## Timing

* Throughput: one event in and one verdict out per cycle, for every formula.
* Latency: `IC_REGS + sum(Head + 1 + IC_REGS)` along any root-to-leaf path; see above. Examples
  with `IC_REGS = 1`: `AP0 -> X AP1` gives 8 cycles, `AP0 or <>_[1,3] AP1` gives 10.
* Reprogramming: `ceil(CFG_BITS / 8)` cycles, 130 at the default size.
* Reset (`rst_n`, asynchronous, active low) clears the configuration (all units inactive, verdict
  0), the Ques and the registers.

## Limits

* **One reader per Que.** A Que names a single reader PE and operand, so a subformula's verdict
  stream can feed only one machine. Until reads each operand with two machines, so with these
  instruction formats Until operands must be APs, which the AP2PE crossbar can fan out freely.
  The hardware would accept a subformula as `a` in `a U_[0,t2] b`, because only one machine reads
  `a` there. The testbench compiler does not offer that case. The other way to handle a
  subformula operand is to build its evaluator twice.
* **Time bounds.** `Head` has `ceil(log2 Q_SZ)` bits. An operator needs `Head >= t2 + 1`, so
  `t2 <= Q_SZ - 2` (254 at the default size), less if balancing must raise that Head further.
* **Capacity.** Each operator needs one Que and one PE (Until: three, or two when `t1 = 0`), plus
  one copy evaluator per AP that must be delayed. 16 PEs and 16 Ques cover formulas of up to 16
  operators only when they use few Untils.
* **Empty cells.** A deleted empty cell reads as `false`. This only affects the verdicts of
  the first `latency` cycles after programming.
* Two assertions (simulation only) catch bad programs: the true and false intervals given to one
  Que must not overlap, and a Que must never delete a `Maybe` cell (its Head would be too small).

## Where this RTL departs from, or goes beyond, the published design

* **Mod flags.** The machine model has separate flags that disable the true or false
  modification. The published PE instruction has no bits for them; its bit count is
  `6 + log N_Q + 4 log Q_SZ`. Here a disabled modification is an empty interval (`lo > hi`).
* **Pipeline registers.** The published monitor was pipelined by putting flip-flops "at the
  inputs of the interconnect". Here that is one register on the inputs of AP2PE, Q2PE and Q2OUT,
  switched by `IC_REGS` (default 1). With these three registers the first property of the
  published reprogramming experiment has the reported latency of 8 cycles. The second,
  `AP0 or <>_[1,3] AP1`, has 10 here against the 11 reported. Registers at the PE2Q inputs would
  add a cycle per level and make the first latency 10, so they were left out. With
  `IC_REGS = 0` the timing is that of the published step-by-step example, and its Heads and
  program bits (including the balanced Head of 3) work unchanged. The published balancing
  procedure adds `Head + 1` per level; with `IC_REGS = 1` the step is `Head + 2`, and the
  compiler must use it.
* **Program loading.** The image layout and byte order are this design's own. The published
  experiment reports 41 cycles to load a 4-PE, 4-Que, 8-AP, 16-cell monitor. The published bit
  counts give 156 bits, and this loader takes 20 cycles for them.
* **Port names.** The published waveform calls the program port `program[7:0]`. `program` is a
  SystemVerilog keyword, so the port is `program_byte`. The APs are one vector, `ap`.
* **Fan-out.** The published text says a deleted value may feed "one or more" PEs, but the
  published Que instruction has a single reader field. The instruction format was followed (see
  Limits).
* **Own choices.** These have no published counterpart:
  * the `empty` cell code;
  * clearing the Ques while programming;
  * OR-merging when a bad program routes two Ques to one operand, or marks two verdict Ques;
  * treating unused opcodes as wire;
  * resetting to an all-inactive configuration.
* The published area (0.55 mm² at 16/16/16/256) and clock rate (1.25 GHz, 32 nm) come from a
  commercial standard-cell flow. They are not reproduced here.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints `TB_RESULT checks=N failures=M`,
and each has a watchdog.

| testbench                  | what it checks                                                                         |
|----------------------------|----------------------------------------------------------------------------------------|
| `tb_mtl_pe`                | random instructions and operands against truth tables; every opcode used               |
| `tb_mtl_que`               | cycle by cycle against an abstract queue model (push / modify / delete), several Heads  |
| `tb_mtl_ap2pe`             | selection, and the one-cycle register, for both `IC_REGS` settings                     |
| `tb_mtl_pe2q`              | coalesced intervals against a cell-coverage model                                      |
| `tb_mtl_q2pe`, `tb_mtl_q2out` | routing, OR-merging and register delay                                              |
| `tb_mtl_prog_loader`       | 20-bit and 1040-bit images with idle gaps between bytes                                |
| `tb_mtl_em_examples`       | `not a0` and `a0 U_[1,2] a1` step by step: every Que cell and PE result               |
| `tb_mtl_monitor`           | default size; 8 formulas with reprogramming between them (below)                       |
| `tb_mtl_monitor_table5`    | the balancing worked example above, programmed field by field                          |
| `tb_mtl_monitor_fig4`      | the reprogramming scenario at the 4/4/8/16 size (below)                                |

Details of the three end-to-end testbenches:

* `tb_mtl_monitor` runs 8 formulas at the default size and reprograms the monitor between them.
  Every verdict is compared with the reference evaluator at exactly the compiled latency. The
  formulas include both Until forms, nesting, unbalanced trees and bounds up to 254. The test
  counts that each mechanism occurred: reprogramming, every opcode, an empty interval selected,
  coalescing, Head balancing, Que-to-operand-1 routing, inactive PEs, and both verdict values.
* `tb_mtl_monitor_table5` runs the balancing worked example (`<>_[0,1] !s1 or <>_[1,4] s2`) with `IC_REGS = 0`, programmed field by
  field as published. The compiler must reproduce the same Heads. The unbalanced Head (2) must
  give wrong verdicts.
* `tb_mtl_em_examples` drives real PEs, the PE2Q crossbar and one Que with fixed operand
  sequences. After every step it compares the whole Que with hand-written rows. For
  `a0 U_[1,2] a1` with `a0 = 0,1,1,0,1` and `a1 = 0,0,0,1,1` the cells 0..3 must read
  `F...`, `MF..`, `MMF.`, `FTTF` and `MFTT` (`.` is empty, cell 3 holds the verdict just deleted).
* `tb_mtl_monitor_fig4` runs the reprogramming scenario at the 4/4/8/16 size and checks the 8-
  and 10-cycle latencies and the 20-byte program.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_mtl_monitor \
        rtl/mtl_pkg.sv $(ls rtl/mtl_*.sv | grep -v mtl_pkg) tb/tb_mtl_monitor.sv -o sim
    ./obj_dir/sim | grep TB_RESULT

The package must come first. Change both occurrences of the testbench name to run another one.
The full-size monitor test takes about 20 s to build and well under a second to run.

## Changing the size

`mtl_monitor` takes `N_PE`, `N_Q`, `N_AP`, `Q_SZ` (power of two recommended) and `IC_REGS`. All
field widths and the image length follow from them. The default monitor synthesises to about
9.4k flip-flops, of which 8k are Que cells (`N_Q × Q_SZ × 2`). Most of the logic is in the
per-cell interval compares of the Ques and in the PE2Q coalescing, which grows as
`N_PE × N_Q`. If `IC_REGS` is changed, the compiler's per-level step changes with it.
