# In-field logic repair with cold spare pipeline stages

Transistors in deep sub-micron CMOS wear out in service. Gate-oxide breakdown,
NBTI and hot-carrier injection first slow a path and later break it. This design
keeps a processor running after such a permanent logic fault. It does so by
switching to a spare copy of the broken part inside the chip, within about a
microsecond.

The unit of repair is a **pipeline stage**. The core has three stages:
predecode, decode and execute. Each exists twice, a *main* copy and a *spare*.
Only the copy in use is powered. The spare is kept off, so it does not age,
until it is needed; this is *cold* standby. When a stage fails, a controller
does the following:

1. It cancels the instruction that went wrong.
2. It powers the failed copy down and the spare up.
3. It switches the spare into the pipeline.
4. It runs the instruction again.

Nothing else in the system sees the fault, except a pause of a few dozen cycles.

Three kinds of hardware make this work:
- **Byte-parity checking between the stages** detects the fault.
- **2-way switch boxes** pick which copy drives the pipeline register.
- **A duplicated, self-checking controller** tells permanent faults from
  transient ones, sequences the power switches and runs the swap.

The register file is not doubled. Like any memory it is protected by an
error-correcting code instead.

The RTL here is a complete, simulatable core built around that scheme. The
architecture of the repair mechanism follows the published description. The
processor underneath it, its instruction set and every number the description
leaves open are choices made for this implementation. Each such choice is
marked below.

## Block diagram

```
             imem                     register file (SECDED ECC, shared)
              |                          ^ rs1/rs2 read        ^ write
              v                          |                      |
   pc --> [PD main]--+               [DE main]--+           [EX main]--+
          [PD spare]-+-switch-> R1 ->[DE spare]-+-switch->R2->[EX spare]-+-switch-> R3 --> commit
                         box    |                  box    |                  box    |     (rf, dmem,
                                v                         v                         v      redirect)
                             parity                    parity                    parity
                             check 1                   check 2                   check 3
                                \________________________|_________________________/
                                                         v
                          self-checking controller (2 copies + two-rail checker)
                           error counters, swap FSM, power sequencing
                                                         |
                             6 power switches (one per stage copy), switch selects, fetch hold
```

PD, DE and EX are predecode, decode and execute. R1, R2 and R3 are the pipeline
registers. Each stage copy ends in its own parity generator, so R1 to R3 hold
the bundle and its parity bits together. The PC of each instruction travels next
to R1 to R3, outside the replicated logic.

## The processor underneath

The published design is a "simple, custom" 32-bit core with three pipeline
stages and a register file, but its instruction set is not given. This
implementation defines a small load/store ISA that has enough in it to stress
every path. It has word-addressed PCs and the fields
`[31:26] opcode, [25:21] rd, [20:16] rs1, [15:11] rs2, [15:0] imm16`:

| group | instructions | effect |
|---|---|---|
| register ALU | ADD SUB AND OR XOR SLT SLL SRL | rd = rs1 op rs2 |
| immediate | ADDI (sign-extended), ANDI, ORI (zero-extended), LUI | rd = rs1 op imm; LUI: rd = imm << 16 |
| memory | LW, SW | LW rd = M[rs1+imm]; SW M[rs1+imm] = R[25:21] |
| control | BEQ, BNE, JAL, HALT | branch if rs1 ==/!= R[25:21] to pc+1+imm; JAL rd = pc+1 and jumps; HALT stops fetching |

The opcodes are in `ifr_pkg::opcode_e`. Any other opcode executes as a NOP.
Register 0 reads as zero.

How the work is split over the stages (cycle t is the fetch):

| cycle | stage | work |
|---|---|---|
| t | predecode | Reads the instruction memory at `pc` (combinational). Extracts the fields, classifies the instruction, picks the second source register (rs2 for ALU ops, `[25:21]` for SW and the branches) and extends the immediate. Writes R1. |
| t+1 | decode | Reads the register file (write-first bypass). Forms the ALU operation, operands a and b, the store/compare operand and the target `pc+1+imm`. Writes R2. |
| t+2 | execute | Forwards the committing instruction's result into any register operand. Runs the ALU and resolves branches. Writes R3. |
| t+3 | commit | Not replicated. Writes the register file or the data memory (load data is read combinationally here). On a taken branch or jump it redirects the PC. |

A back-to-back dependence is covered by two paths. The forwarding path in
execute covers a distance of one; the register file's write-first bypass covers
a distance of two. There are no stall cycles for data hazards. A taken branch
costs 3 bubbles.

Stage outputs are packed structs (`pd_t` 64 bits, `de_t` 160 bits, `ex_t` 112
bits). Each is padded to whole bytes so that every byte has its own parity bit.

## From a bad bit to a repaired core

This is the part that needs the closest reading. The following runs in order.

**1. Detection.** Each stage copy computes odd parity over each byte of its
output bundle. The register stores the bundle and its parity together, and a
checker behind the register compares them. The parity generator is part of the
stage copy; the checker is behind the switch box and the register. So a fault
in a stage's output, in the switch or in the register all show up the same
way. Odd parity is a choice of this implementation. With it, an all-zero bundle
with all-zero parity is an error, and that is exactly what a powered-off,
isolated block produces.

**2. Containment and replay.** Take an error on a *valid* instruction in R1, R2
or R3. That instruction and everything younger are squashed, and fetching
restarts at the faulty instruction's PC. The commit stage only ever writes
results that passed the R3 check; an assertion in `ifr_core` holds this. So a
fault never reaches architectural state. When there are several causes in one
cycle, the oldest wins, in this order: error in R3, then HALT, then a taken
branch at commit, then an error in R2, then an error in R1.

**3. Permanent or transient.** The published rule is that an error that lasts
longer than an adjustable count is permanent. Here the "lasting" is observed
through replay. A stuck-at fault fails the same replayed instruction again and
again. A transient fails it once and then goes away. Each stage has two
counters in the controller:

- an **error counter**: +1 for every parity error on a valid instruction at
  that stage's register;
- a **clean counter**: counts valid instructions that pass the same checker
  cleanly. It is reset by an error. When it reaches `CLEAN_WINDOW` (64), the
  error counter is cleared.

Bubbles change neither counter. When the error count reaches `err_threshold`,
the copy in use is declared failed. `err_threshold` is an input, so it can be
changed at run time; the value 0 selects the parameter `ERR_THRESHOLD`, which
is 8. The clean window matters for delay faults. A slow bit only errs when it
toggles, so it may pass its replay, yet it keeps erring every few instructions.
A counter that any single clean instruction could clear would never see it.
Both numbers are choices of this implementation.

**4. Swap.** The controller does three things in the same clock edge:
- it marks the copy failed;
- it clears that copy's power enable;
- it sets the other copy's power enable.

It then holds fetch until the other copy's power switch reports power good.
Only then does it flip the stage's switch select and release fetch. Fetch
resumes at the PC saved by the replay, so the failed instruction is the first
to run on the new copy. Older instructions still in later stages drain and
commit normally during the wait.

**5. Second failure.** If the copy that failed is the stage's second copy, the
controller enters `FATAL`. It holds fetch for good and raises `fatal`. This is
the one-spare scheme of the design's reliability model: working, then failed
once, then repaired, then failed again and dead.

Typical timeline for a stuck-at fault in execute, as measured by
`tb_ifr_core`: 8 replays at about 4 cycles each, then 64 cycles of power ramp,
then refill of the pipeline. That is 97 cycles from the first detected error to
the first commit after the swap, or 0.97 µs at 100 MHz.

| fault (main copy) | published recovery | this RTL |
|---|---|---|
| stuck-at, decode | 0.82 µs | 90 cycles = 0.90 µs |
| stuck-at, execute | 1.00 µs | 97 cycles = 0.97 µs |
| delay, decode | 1.20 µs | 112 cycles = 1.12 µs |
| delay, execute | 1.51 µs | 97 cycles = 0.97 µs |
| stuck-at, predecode | — | 83 cycles = 0.83 µs |

The published numbers come from a different program and unknown settings. The
agreement shows the right order of magnitude, not a reproduction. The recovery
time is roughly `ERR_THRESHOLD × (replay distance + 1) + RAMP_CYCLES + 3`.

## The self-checking controller

`ifr_controller` holds two instances of the controller function,
`ifr_ctrl_fsm`. Both receive the same inputs. The second is built with
`INVERT = 1`, so every output it drives is the complement of the first's. The
17 output pairs (switch selects, six power enables, six failed flags, hold,
fatal) go into a totally self-checking two-rail checker. The checker is a chain
of standard TRC cells, `f = x0·x1 + y0·y1`, `g = x0·y1 + y0·x1`. It raises
`ctrl_error` whenever any pair is not complementary, for example after an upset
in one copy's state. The core uses the first copy's outputs. It only reports
`ctrl_error`; what the system should do then is left open.

## Power sequencing

Each of the six stage copies sits behind an `ifr_power_switch`. This is a
behavioural model of a power-gating header: `pwr_ok` rises `RAMP_CYCLES` (64)
edges after its enable. In silicon this switch would be inserted during
physical design. A copy whose `pwr_ok` is low clamps its outputs to zero.

After reset the controller powers the three main copies one at a time, in a
daisy chain: predecode, then decode once predecode is good, then execute. Only
then does it start fetching, which takes about 3 × 64 cycles. Turning blocks on
in sequence limits the in-rush current. The spares are never powered unless a
swap needs them.

## Register file

`ifr_regfile` has 32 registers of 32 bits, two read ports and one write port.
It stores each word as a 39-bit SECDED codeword: Hamming(38,32) with check bits
at positions 1, 2, 4, 8, 16 and 32, plus an overall parity bit (see
`ecc_encode` and `ecc_decode` in `ifr_pkg`). On a read:
- a single flipped bit is corrected and flagged on `ecc_corrected`;
- two flipped bits are flagged on `ecc_uncorrectable`.

The stored word is not scrubbed (rewritten with the corrected value).

## Fault-injection hook

Each stage copy has an `fi_t` input, carried on the core's `fi` port with index
`2*stage + copy`. It can corrupt one bit of that copy's output bundle, after
the parity generator:
- `FI_STUCK` forces the bit to `stuck_val`;
- `FI_DELAY` passes the bit's value from the previous cycle, which models a path
  slower than the clock.

This is how the testbenches create permanent faults. Tie `fi` to zero in a real
system.

## Departures from the published design, and what is missing

- **Processor contents are this implementation's own.** That means the ISA, the
  split of work over the stages, forwarding, branch handling, and the memory
  interface (outside the core, combinational read).
- **Error persistence is counted in replays, not cycles.** See step 3 above.
  The clean-window rule is this implementation's own.
- **The second detection technique is not built.** The published design can
  also tell transients apart by comparing a flip-flop's input and output within
  one clock cycle. That is a sub-cycle timing check with no cycle-level RTL
  form. Only the counter technique is implemented.
- **Y2 is unused.** The switch box is the full 2×2 cell (two 2:1 multiplexers
  per bit, crossing when `s = 1`). Only its Y1 output is used; Y2, the off-line
  copy's bundle, has no consumer. Lint reports Y2, the unused byte-error
  vectors and the struct padding bits as unused.
- **No swap back.** The published text hopes that a block switched off for a
  while regains some threshold-voltage margin and could be reused when its
  spare later fails with an ageing fault. This core treats a copy, once failed,
  as dead.
- **Spares are exact replicas.** Reduced-function or differently-built spares
  (graceful degradation) are discussed as alternatives and are not built.
- **Power gating and timing are modelled at cycle level only.** The power
  switches are behavioural models with a fixed ramp time. Delay faults are
  modelled as one bit arriving one cycle late.
- **Reliability, area and power figures are not reproduced.** The published
  results come from a SURE Markov analysis and a 45 nm layout, which RTL
  cannot reproduce.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`.

`tb_ifr_core` runs the core at its default parameters. A 230-instruction
program (loop with load/store, dependent ALU chains, shifts, compare, branches,
a jump, HALT) runs under nine scenarios:
- no fault;
- stuck-at in decode, execute and predecode;
- delay in decode and execute;
- a 3-cycle transient, which must be forgiven;
- faults in both execute copies, which must end `fatal`;
- a flipped register-file bit, which ECC must correct.

Every commit is compared with an instruction-set model (`tb/ifr_ref_pkg.sv`),
and so is the final data memory. The testbench also checks:
- the daisy-chain order;
- that spares stay off in fault-free runs;
- that only the faulty stage is swapped;
- recovery within 160 cycles;
- that `ctrl_error` never rises.

It counts each mechanism (replay, swap, hold, forwarding, load/store, taken
branch, halt, transient forgiven, fatal, ECC correction, stuck-at and delay
repair) and fails if any never happened.

`tb_ifr_fault_campaign` runs the same program 60 times with one random fault
each: a random stage, copy-0 output bit, kind (stuck-at-0, stuck-at-1, one
cycle late) and injection time. Every run must produce the reference commit
stream and memory, and a swap may only hit the faulty stage. A fault on a bit
the program never exercises stays silent, which is allowed. Over 21 seeds the
mean recovery was 91 to 99 cycles. Faults that only show for some data values
took up to 271 cycles, because their errors are spread over clean
instructions; the campaign's bound is therefore 500 cycles.

The unit testbenches compare each block against independently written
arithmetic: parity by counting ones, ALU results, field extraction, ramp timing
and so on. `tb_ifr_controller` upsets a state bit in the checking copy and
expects `ctrl_error`.

## Simulating

With Verilator 5 (package files first):

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/ifr_pkg.sv tb/ifr_ref_pkg.sv rtl/*.sv tb/tb_ifr_core.sv \
    --top-module tb_ifr_core -o sim
./obj_dir/sim
```

For a unit testbench, replace the last file and `--top-module` with, for
example, `tb/tb_ifr_ctrl_fsm.sv` and `tb_ifr_ctrl_fsm`; `tb/ifr_ref_pkg.sv` is
only needed by the core testbench. The core run takes well under a second.

Parameters worth changing:

| parameter | where | default | meaning |
|---|---|---|---|
| `ERR_THRESHOLD` | `ifr_core` | 8 | errors before a copy is declared failed (when `err_threshold` input is 0) |
| `RAMP_CYCLES` | `ifr_core`, `ifr_power_switch` | 64 | power-switch ramp time |
| `CLEAN_WINDOW` | `ifr_ctrl_fsm` | 64 | clean instructions that clear an error count |
| `NREGS` | `ifr_regfile` | 32 | registers |

## Files

| file | contents |
|---|---|
| `rtl/ifr_pkg.sv` | opcodes, stage bundle structs, controller output struct, SECDED functions |
| `rtl/ifr_core.sv` | top: pipeline, replication, switches, checkers, commit, replay |
| `rtl/ifr_predecode.sv`, `ifr_decode.sv`, `ifr_execute.sv` | the three replicated stages |
| `rtl/ifr_parity_gen.sv`, `ifr_parity_check.sv` | byte parity |
| `rtl/ifr_switch_box.sv` | 2-way switch, two 2:1 multiplexers per bit |
| `rtl/ifr_ctrl_fsm.sv`, `ifr_controller.sv` | controller function, duplicated self-checking controller |
| `rtl/ifr_trc_cell.sv`, `ifr_trc_tree.sv` | two-rail checker |
| `rtl/ifr_power_switch.sv` | behavioural power-gating switch |
| `rtl/ifr_regfile.sv` | ECC register file |
| `rtl/ifr_fault_inject.sv` | stuck-at / delay fault hook |
| `tb/ifr_ref_pkg.sv` | ISA reference model and instruction encoders for the testbenches |
| `tb/tb_*.sv` | one testbench per module; `tb_ifr_core` is the end-to-end test |
