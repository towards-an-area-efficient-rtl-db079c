# An EDGE soft processor core with an incremental dataflow scheduler

This is synthesizable SystemVerilog for a compact out-of-order processor
that uses an EDGE (Explicit Data Graph Execution) instruction set. It
follows the microarchitecture in J. Gray and A. Smith, "Towards an
Area-Efficient Implementation of a High ILP EDGE Soft Processor", and
uses the smaller of the two instruction schedulers described there, the
*incremental* scheduler. Where that description stops, this code makes its
own choices. They are listed below and in the header comment of each file.

## The idea

A conventional out-of-order core finds out at run time which instruction
depends on which. That takes register renaming, wakeup CAMs and many-ported
register files, and all of these are expensive in an FPGA. An EDGE
instruction set has the compiler record the dependences instead:

* A program is a sequence of **blocks** of up to 32 instructions. A block is
  fetched, executed and committed as a unit.
* Inside a block, an instruction does not name a destination register. It
  names up to two **targets**: "operand #0 of instruction 7" or "the
  predicate of instruction 4". Its result is written straight into the
  target's **operand buffer**, and the target's matching input is marked as
  present.
* An instruction may issue once all of its inputs are present. So
  instructions run in dataflow order, and no renaming is needed.
* Branches inside a block become **predicates**. A test instruction sends
  true or false to the predicate input of its consumers. An instruction
  predicated on true issues only if it receives true.
* A result with many consumers can be sent on one of three **broadcast
  channels** (1 to 3) instead. Each instruction names the channel it
  listens on.
* Blocks pass values to each other through the 32-entry register file (READ
  instructions, register-write targets) and through memory.

What remains hard is the **instruction scheduler**: each cycle it must
record which inputs of which instructions have arrived and pick the next
ready instruction. It must also let a chain of dependent one-cycle
instructions issue in consecutive cycles. Most of this README is about that
part.

## Instruction encoding used here

The field names and widths come from the EDGE general format. Bit positions
follow the field order. The opcode values, the predicate code, the target
code and the header layout were chosen for this implementation.

```
 31      25 24 23 22 21 20  18 17        9 8         0
+----------+-----+-----+------+-----------+-----------+
|  OPCODE  | PR  | BID | XOP  |  TARGET1  |  TARGET0  |
+----------+-----+-----+------+-----------+-----------+
```

* `PR`: `00` not predicated, `10` predicated on false, `11` predicated on
  true.
* `BID`: the broadcast channel the instruction listens on (`00` for none).
* A target (9 bits) is one of the following:

  | `[8:7]` | meaning |
  |---|---|
  | `01` | predicate of instruction `[4:0]` |
  | `10` | operand #0 (left) of instruction `[4:0]` |
  | `11` | operand #1 (right) of instruction `[4:0]` |
  | `00` with `[6:5]=01` | write register `[4:0]` |
  | `00` with `[6:5]=10` | broadcast on channel `[1:0]` to input slot `[4:3]` (`01` predicate, `10` left, `11` right) |
  | all zero | no target |

* Immediate forms (`ADDI`, `TLEI`, `MOVI`, `LD`, `ST`, ...) put a 9-bit
  signed immediate in TARGET1 and have only TARGET0. `READ` puts its
  register number in TARGET1.
* `BRO` holds an 18-bit signed word offset from the current block's header
  in `{TARGET1,TARGET0}`. Offset 0 means "run this block again". `BRO` with
  `XOP[0]=1` halts the core.
* A block in memory is a header word followed by its instructions. The
  header holds the instruction count in `[5:0]`, the number of register
  writes in `[13:8]` and the number of stores in `[21:16]`. The core uses
  the two counts to tell when the block has finished.

Opcodes: `READ MOVI MOV`, `ADD SUB AND OR XOR SHL SHR SRA` and their
immediate forms, `MUL`, the tests `TEQ TNE TLT TLE TGT TGE` (signed) and
their immediate forms, `LD ST` (32-bit words) and `BRO`. The full list is in
`rtl/edge_pkg.sv`. `tb/edge_asm_pkg.sv` has small encoder functions for
writing test programs.

## Pipeline and block life cycle (`edge_core`)

```
 IF/DC  front_end      header, then 2 instructions/clock -> decoder x2 -> window
 IS     incr_scheduler INSN = the issuing instruction; operands from
                       operand_buffers / forwarding / broadcast value; READ reads regfile
 EX     alu, address add, dcache_data access, multiplier stage 1
 LS     result = load data | product | ALU value
        -> operand buffers of targets, late ready events, register-write
           queue, broadcast fire, branch target
```

* **Fetch and decode** (`front_end`, `decoder`, `icache_data`). This stage
  reads the header and then two words per clock from the two-port
  instruction array. Instruction `2k` goes to the even decode slot and
  `2k+1` to the odd one. The front end runs ahead of the back end, and the
  back end may issue as soon as the first ready instruction is decoded.
* **Issue.** The scheduler places one decoded instruction per cycle in the
  `INSN` register. Its operands are read in the same cycle. A target of the
  instruction in EX or LS is forwarded, because that result has not yet
  been written to the operand buffers.
* **Execute / memory.** Stores write the data array at the end of EX. Loads
  read it at that edge, and the data is used in LS.
* **Results** are written in LS to the targets' operand buffers. Up to two
  writes per cycle are possible, so `operand_buffers` has two write ports.
  Register writes are queued in LS. They reach the register file only when
  the block commits, so every `READ` in a block sees the registers as they
  were when the block started.
* **Commit.** A block is complete when four things hold: its branch has
  executed, the header's write and store counts have been reached, and the
  whole block has been decoded. The core then stops issuing and drains the
  write queue into the register file, one register per cycle. Then it
  starts the next block in one of two ways:
  * **block reset**: a new block. All ready state is cleared, and the new
    block is fetched and decoded.
  * **block refresh**: a branch back to the same block. Only the *active*
    ready state is cleared. The decoded instructions and decoded ready state
    are kept, so a loop body runs again without fetching or decoding.

The interface of `edge_core`:
* Load the program through `imem_*` and data through `dmem_*` while the core
  is idle.
* Pulse `run` with `start_addr`, which is the word address of the first
  header.
* Wait for `halted`.
* `dbg_reg` / `dbg_reg_data` read a register, and `dmem_*` reads memory
  after the halt.

## The incremental scheduler (`incr_scheduler`, `sched_bank`, `fcso_ram`, `ready_queue`)

### Ready state

Each window entry has two 4-bit ready-state words, with bits
`{RT, RF, R0, R1}` in that order:

* **decoded ready state** `{DRT,DRF,DR0,DR1}`, written by the decoder.
  * `DRT` is set unless the instruction waits for a *true* predicate, and
    `DRF` is set unless it waits for a *false* one.
  * `DR0` / `DR1` are set when operand #0 / #1 is not used.
  * An unpredicated instruction with no operands (`READ`, `MOVI`, an
    unpredicated `BRO`) therefore decodes as `1111`, which means ready.
* **active ready state** `{RT,RF,R0,R1}`, set by ready events. An operand
  event sets `R0` or `R1`. A predicate event sets `RT` when the value is
  true and `RF` when it is false. So an instruction predicated on true
  (`0111`) becomes ready only on a true predicate.

For the `ADD` in the examples (`1100`), operand #1 arriving gives
`1100 | 0001 = 1101`, and operand #0 then completes it to `1111`.

### Banks and the flash-clear problem

The state is kept in small RAMs, not in a flip-flop per bit, and only the
entries that an event targets are re-evaluated. A LUT-RAM cannot be cleared
in one cycle and takes one write per cycle. The design handles the two
limits as follows:

* **Validity bits.** Each 16x4 RAM is paired with a 16x1 *flash-clearable,
  set-only RAM* (`fcso_ram`). That is 16 flip-flops with a common clear;
  writing an entry sets its bit. An entry counts only while its bit is set.
  Block reset clears the decoded valid bits (`DVS`) and the active valid
  bits (`AVS`) in one cycle. Refresh clears only `AVS`.
* **Write ports by interleaving.** The window is split into even and odd
  banks (`SCH0`, `SCH1`), each with its own decoded and active RAMs. The two
  decode slots always write one even and one odd entry. Each bank applies
  one event per cycle by read-modify-write:

  ```
  ARDYS_NXT = (DV ? DRDYS : 0) | (AV ? ARDYS : 0) | EVT_RDYS
  READY     = &ARDYS_NXT
  ```

  In this implementation READY is raised only when the entry *becomes*
  complete, that is when the previous value was not already `1111`. A
  repeated event therefore cannot issue an instruction twice, which the
  flip-flop scheduler prevents with a separate inhibit bit.

### Events: issue-stage and late

When an instruction issues, its one-cycle-latency targets are woken in the
same cycle. This covers `READ`, `MOVI`, `MOV`, ALU and ALU-immediate
instructions. The decoder has already sorted such targets into an
even-bank event and an odd-bank event (`INSN.ev_even`, `INSN.ev_odd`). Each
bank's event mux takes that event, and the woken instruction can be selected
in the same cycle. The loop

```
INSN -> event mux -> bank RAM read -> ready logic -> IID select -> INSNS read -> INSN
```

closes in one clock, so a chain `A -> B -> C` issues in consecutive cycles.
Its operands come from the EX or LS forwarding paths.

All other wakeups are **late**: they are sent from the LS stage once the
value is known. These are:
* test results (predicates);
* loads and multiplies;
* predicate, register and broadcast targets;
* the second of two targets that fall in the **same bank**. A bank takes
  only one event per cycle, so that second event is queued. This is a bank
  conflict.

Late events wait in a per-bank pending-event queue (`EVT0`, `EVT1`). A bank
takes from this queue only in cycles when the issuing instruction has no
event for it. When either queue is nearly full, issue is held until it
drains.

### Choosing the next instruction

The IID selection works as follows:
1. If `SCH0` raised READY, that instruction issues next.
2. Otherwise, if `SCH1` raised READY, that instruction issues next.
3. Otherwise one IID is taken from the ready queues, in this order:
   * `LSRDYQ`: loads and stores released in program order by the load-store
     queue;
   * `ISRDYQ`: woken instructions that could not issue at once. This holds
     the odd one when both banks are ready, either bank's when issue is
     held, and instructions found complete at decode (see below);
   * `DCRDYQ`: instructions the decoder found ready. These are the 0-input
     instructions that start a block.

The selected IID reads the decoded instructions RAM (`INSNS`, split into an
even and an odd half so both decoders can write each cycle) into `INSN`.

### Broadcasts

The decoder puts the IID of every instruction that listens on channel *c*
into `BRcQ`. When a broadcast result on channel *c* reaches LS, its value
and input slot are stored for that channel. The channel's queue is then
drained into the pending-event queues, one listener per cycle. This serial
drain is where the incremental scheduler pays for broadcasts. A flip-flop
scheduler would wake all the listeners at once. Listeners read the stored
broadcast value as their operand.

### Three details the source design leaves open

* **Events before decode.** A producer can issue before its target has been
  decoded. The event is kept in the active RAM, since `AV` is set even
  though `DV` is not. When the entry is decoded later, the bank reads its
  active state through the spare read port of the RAM. If the entry is now
  complete, it is pushed onto `ISRDYQ`. If the decode and the event arrive
  in the same cycle, the event path uses the new decoded state. The
  selector then takes the decoded instruction directly from the decoder,
  because `INSNS` is not written until the end of that cycle.
* **Replay on refresh.** `DCRDYQ` and the `BRcQ` are circular buffers that
  are never overwritten within a block. Refresh rewinds their read pointers
  to the start. This restores the block's 0-input instructions and broadcast
  listeners without decoding again. The dynamic queues (`ISRDYQ`, `LSRDYQ`,
  the event queues) are emptied.
* **Priority among the queues.** This is the order given above, chosen here.
  As in the source design's incremental scheduler, the next instruction is
  the one just woken or the head of a queue. It is not the lowest-numbered
  ready instruction, as a flip-flop scheduler with a priority encoder would
  pick.

## Memory ordering (`lsq`)

Loads and stores must reach memory in program order, which inside a block is
IID order. The decoder marks memory instructions. A load or store that
becomes ready is not executed. It goes through the `INSN` slot once as a
bubble and is *deferred* in the load-store queue. Each cycle the queue looks
at the lowest-numbered memory instruction not yet released. If that
instruction has been deferred, the queue releases it to `LSRDYQ`, and it
then issues, executes and accesses memory. Nothing is speculative.

This requires every load and store in a block to execute. A predicated-off
memory instruction would block the ones after it.

## Files

| file | contents |
|---|---|
| `rtl/edge_pkg.sv` | opcodes, target code, ready-state bit order, decoded-instruction and event types |
| `rtl/edge_core.sv` | top level: pipeline, forwarding, write queue, commit, reset/refresh |
| `rtl/front_end.sv` | header read, 2-wide fetch and decode |
| `rtl/decoder.sv` | one instruction -> decoded form, decoded ready state, event sorting |
| `rtl/icache_data.sv` | two-read-port instruction array (4K x 32) |
| `rtl/incr_scheduler.sv` | the 32-entry scheduler, `INSNS`, queues, selectors, broadcast drain |
| `rtl/sched_bank.sv` | 16-entry bank: decoded/active RAMs, valid bits, ready logic |
| `rtl/fcso_ram.sv` | flash-clearable set-only RAM |
| `rtl/ready_queue.sv` | multi-push FIFO with rewind |
| `rtl/operand_buffers.sv` | 32 x (left, right) x 32-bit operand buffers, two write ports |
| `rtl/regfile.sv` | 32 x 32 register file |
| `rtl/alu.sv` | ALU and tests |
| `rtl/multiplier.sv` | two-stage multiplier |
| `rtl/lsq.sv` | in-order load-store queue |
| `rtl/dcache_data.sv` | single-port data array (4K x 32) |
| `tb/*_tb.sv` | one self-checking testbench per module; `edge_core_tb` runs whole programs |
| `tb/edge_asm_pkg.sv` | instruction encoders for testbenches |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops by itself.
For example, to run the whole-core test:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/edge_pkg.sv tb/edge_asm_pkg.sv rtl/*.sv tb/edge_core_tb.sv \
  --top-module edge_core_tb -o sim
./obj_dir/sim
```

Replace `edge_core_tb` to run another testbench. Add `+trace` to the
`edge_core_tb` run to print the first 60 cycles of issue and event activity.

`edge_core_tb` runs the core at its default size and runs a three-block
program:
* an initial block;
* a loop block executed 10 times through refresh. The loop index is
  broadcast to four consumers, and it contains a multiply, a store and a
  test whose predicate is broadcast to the two branches;
* an exit block with a same-bank target conflict, a load and register
  writes.

The testbench checks the registers and memory, and counts each scheduler
mechanism: issue-stage wakeup, deferral to `ISRDYQ`, bank conflict,
broadcast drain, refresh, reset, load-store deferral and release, both
forwarding paths, late events, wakeup found at decode, and predicate
events. A mechanism that never occurs counts as a failure. The program
takes about 280 cycles.

`incr_scheduler_tb` runs the first example block of the EDGE overview
(`READ, READ, ADD, TLEI, BRO.T, BRO.F`). It checks that the first four
issue in four consecutive cycles and that only the branch matching the
broadcast predicate issues, both before and after a refresh. `edge_fig1_tb` runs the same block on the
whole core, once with each predicate outcome. It checks the same
four-cycle issue run, that only the matching branch issues, and which
successor block ran. In the core the test result reaches the two branches
through a broadcast drain.

## How closely this follows the source design

Taken from the source design:
* 32-entry window and 32-bit data;
* two decoders and a single issue;
* the IF/DC/IS/EX/LS pipeline with a decoupled front end;
* target-form operands, predication, broadcast channels 1 to 3 with
  decoder-filled listener queues;
* block reset and refresh and what each clears;
* even and odd 16-entry banks of LUT-RAM state validated by flash-clearable
  set-only RAMs, and the ready-logic equation;
* issue-stage wakeup of one-cycle instructions, late wakeup of tests;
* queueing of the second same-bank event;
* the three ready queues and the rule that the odd instruction is queued
  when both banks are ready;
* a simple in-order load-store queue;
* the 32 x 32 register file and operand buffers;
* the two-stage multiplier position.

This implementation's own choices:
* the opcode values, target code and header format;
* commit by counts, with buffered register writes;
* the halt encoding;
* forwarding from EX and LS;
* the pending-event queues and their issue hold;
* the queue priority;
* the late-ready path for targets decoded after their inputs arrived;
* reissue prevention by the READY edge;
* rewinding queues on refresh;
* store/load timing;
* word-only memory access.

Not built:
* The **parallel (flip-flop) scheduler** and its 32-to-5 priority encoder.
  It is the alternative the incremental design is measured against.
* **Cache tags, misses and refill.** Only the data arrays of the
  instruction and data caches are built, and they act as memories.
* A **divider**. There is no `DIV`, so the second example block of the EDGE
  overview cannot run.
* **Branch or memory-dependence prediction**, which the source design also
  leaves out.
* The **FPGA-specific mapping**: shift-register-LUT queues, LUT-locked
  decoders, relative placement, carry-chain AND-reduction.
* The **pipelined variants** that trade back-to-back issue for a shorter
  clock.

The operand buffers use flip-flops with two write ports rather than
LUT-RAMs.

Limitations of this implementation:
* Loads and stores may not be predicated off (see above).
* An instruction may broadcast on only one channel.
* A window holds 32 instructions, so the 64-entry and four-bank scale-ups
  discussed with the source design are not supported.
