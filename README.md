# BasicBlocker RV32IM core: a pipeline that never speculates

Spectre-type attacks rely on the processor running instructions that it only
guesses it will need. Turn off the guessing (the branch predictor and fetch past
unresolved branches) and the attacks are gone, but an in-order pipeline then
stalls after every instruction. It cannot tell whether the next word is a
branch until that word has been decoded, so it may not fetch past it.

BasicBlocker gives the hardware that knowledge ahead of time. Every basic block
opens with a new instruction, `bb`, that states how many instructions follow
it and whether any of them can change the control flow. Control-flow
instructions do not redirect fetch when they execute. They write the next
block's address into a target register, which takes effect only after the
block's last instruction. The fetch unit can therefore fetch a whole block
without speculating. A branch may sit anywhere in its block: if the compiler
hoists it early, its outcome is known before the block has been fetched, and
the change of flow costs nothing.

This repository holds synthesizable SystemVerilog for such a core. It is a
5-stage in-order RV32IM pipeline (IF ID EX MEM WB) with no branch prediction
and no speculative fetch, 4 KiB instruction and data memories, and the
BasicBlocker extension:

- the `bb` instruction;
- control flow delayed to the end of the block;
- non-speculative fetch of the next `bb` into the running block;
- the rule that every block must begin with `bb`, with exceptions for breaking
  it;
- four hardware loop counters driven by flags in `bb` and a new `lcnt`
  instruction.

## The two new instructions

| | 31..16 | 15..12 | 11..8 | 7 | 6..0 |
|---|---|---|---|---|---|
| `bb n, seq, ls, le` | n-1 | le (end flags) | ls (start flags) | seq | 0001011 (custom-0) |

| | 31..20 | 19..15 | 14..12 | 11..7 | 6..0 |
|---|---|---|---|---|---|
| `lcnt rd, rs1, imm` | imm | rs1 | 000 | rd = 1..4 (lc1..lc4) | 0101011 (custom-1) |

- **`n`** is the number of instructions after the `bb` (1..65536). The field
  holds n-1, so a size of zero cannot be written.
- **`seq`** = 1 promises that the block contains no control-flow instruction
  (no branch, JAL or JALR). The next block then starts at the address just
  after it.
- **`seq`** = 0 requires exactly one control-flow instruction somewhere in the
  block. Its outcome, taken or not, picks the next block.
- **`ls[k]` / `le[k]`** mark the block as the start and/or end of a loop
  counted by counter set k+1 (see "Loop counters").
- **`lcnt rd, rs1, imm`** loads counter set `rd` with `rs1 + imm`.

The field widths are fixed by the instruction-set definition: a 16-bit size,
a one-bit sequential flag, four start and four end flags, and an I-type
`lcnt`. The bit positions and the two opcodes are this design's choice. They
live in `rtl/bb_pkg.sv` and in the small assembler in `tb/tb_asm_pkg.sv`.

## What changes for ordinary instructions

- **Branches, JAL, JALR** compute their outcome in EX as usual. The outcome
  goes to the target register T, not to the PC. A branch that is not taken
  writes the block's fall-through address (the word after the block's last
  instruction) into T.
- **JAL/JALR link value.** The link register receives the block's fall-through
  address, not pc+4. A call may be followed by more instructions of its own
  block, and the callee must return to the next block. This is a choice of
  this design: the rule is not spelled out in the source definition.
- **Everything else** is standard RV32IM. EBREAK stops the core, which is how
  the test programs end. FENCE and ECALL do nothing. There are no CSRs,
  interrupts or traps: programs run bare-metal.

## Fetch: how the core knows what to fetch (`bb_fetch_unit`)

This is the heart of the design. The fetch unit holds:

| register | meaning |
|---|---|
| `ic` | body instructions of the current block still to fetch |
| `T` (`t_q`, `tk_q`) | address of the next block, and whether it is known yet |
| `P` (`p_q`, `nb_q`) | the next block's decoded `bb`: size and flags, and whether it has been fetched or is back from EX |
| `pc` | next body address of the current block |
| `tag` | one bit that flips each block |

Every cycle, with no stall, it fetches at most one word, picked in this order:

1. **Block switch.** When `ic` = 0 and P holds the next block's resolved
   `bb`, that block becomes current. `ic` takes its n, and its first body
   instruction is fetched in the same cycle.
2. **Next `bb`.** If T is known and the next block's `bb` has not been fetched
   yet, it is fetched now, ahead of any remaining body instructions.
   - For a sequential block or a loop-end block, T is known as soon as the
     block starts.
   - For any other block, T is known once its control-flow instruction has
     resolved.
3. **Body.** Otherwise, if `ic` > 0, the next body instruction is fetched.

Only a word that will certainly execute is ever fetched, so the pipeline has no
flush path.

**Where the `bb` size comes from.** A `bb` fetched this way travels down the
pipeline like any instruction but changes no register. Its decoded size and
flags are taken from the EX/MEM register, in the cycle the `bb` is in MEM, and
stored in P. Control-flow outcomes reach T the same way, from EX/MEM.

**Resulting timings** (checked by `tb_bb_soc`):

| event | cycles after |
|---|---|
| first body instruction of a sequential block | 3 after its `bb` |
| next block's `bb` after the block-ending branch | 3 after the branch |
| next block's first instruction | 6 after the branch |

The last two rows are the worst case: a branch placed last in its block. Its
`bb` is fetched in the branch's MEM cycle, and the next block's first
instruction in the `bb`'s MEM cycle. That is the pipeline diagram the design
follows. A branch hoisted three or more instructions before the end of its
block hides most or all of this.

Each fetched word carries side information down the pipeline for the checker
and the branch unit:

- its slot (body or `bb`);
- the block tag;
- first and last of block;
- "this block may hold no control flow";
- the block's fall-through address.

The tag prevents a late control-flow result from being credited to the next
block.

## Loop counters (`loop_counter_unit`)

A single-block loop closed by a branch pays the worst-case cost on every
iteration. The loop counters remove it.

**Storage.** There are four sets, each holding a 32-bit count and a start
address. `lcnt` writes the count in EX.

**Block switch.** When a block whose `bb` has flags becomes current:

- **start flag `ls[k]`:** set k+1 stores this `bb`'s address as its loop start
  and decrements its count. The count saturates at zero.
- **end flag `le[k]`:** if the count of set k+1 is still non-zero after that
  decrement, the next block is the loop start. Otherwise it is the
  fall-through. The block needs no control-flow instruction and is treated as
  sequential, so T is known at once and the next `bb` is prefetched with no
  wait.

With several end flags, the lowest-numbered set decides.

So `lcnt lc1, x0, 3` followed by a block `bb 2, 0, 0001, 0001` runs that block
three times. This is also how `tb_bb_soc` uses it.

**Ordering with `lcnt`.** A block switch that would read or update the counters
waits while an `lcnt` is still in ID or EX, or in one of the optional dummy
stages. The count is then up to date.

**The source's conflict on counts.** The source's example loop and its
execution trace disagree on whether `lcnt 3` or `lcnt 2` gives three
iterations. This design follows the example: the count equals the number of
iterations.

## Rule checking and exceptions (`bb_checker`)

The checker watches the EX stage. It keeps a one-bit "control flow seen in this
block" flag and one pending error. An exception stops the core:

- `exc_flag` is set;
- `exc_cause` gives the reason;
- `exc_pc` gives the address of the instruction after which the exception was
  taken;
- every younger instruction is squashed.

There is no trap handler.

| cause | code | raised |
|---|---|---|
| `bb` inside the n instructions of a block | 1 | at once; the `bb` itself completes |
| control flow in a block marked sequential | 2 | after the block's last instruction |
| block with `seq` = 0 ended with no control flow | 3 | after the block's last instruction |
| the word at a block boundary is not a `bb` (enforced BB) | 4 | when execution reaches it: once the pipeline has drained |
| illegal instruction | 5 | at once; the instruction is dropped |
| second control-flow instruction in one block | 6 | after the block's last instruction |

Control-flow errors wait for the end of the block. Up to that point the block
behaves as if the rule held: its remaining instructions complete, and only
then does the exception stop the core.

A word after a block boundary that is not a `bb` raises nothing when it is
only prefetched. It raises cause 4 only when the program would actually
continue there, so the data or padding after a program's final EBREAK block is
harmless.

## Pipeline (`bb_core`)

- **IF.** The fetch unit addresses the instruction memory (combinational read)
  and the word is registered into IF/ID.
- **ID.** `rv32_decoder` and `bb_decoder` decode the word and the register
  file is read. It is written in WB, with write-through to decode.
- **Load-use stall.** A load followed directly by a user of its result stalls
  decode one cycle. Fetch holds, and fetch results are still captured.
- **EX.**
  - Operands are forwarded from EX/MEM and MEM/WB.
  - The ALU does RV32IM. Multiply and divide are single-cycle combinational.
  - `branch_unit` resolves control flow.
  - `lcnt` writes its counter set.
  - The checker runs.
- **MEM.** Data memory, with byte, halfword and word accesses, which must be
  aligned. Control-flow and `bb` results are handed to fetch from here.
- **WB.** Register write.

Event outputs pulse once per occurrence: retire, fetch, load-use stall, operand
forward, early `bb` fetch, block switch, loop-counter jump-back, control-flow
resolution. They serve performance counting and the end-to-end test.

## Memories (`icache`, `dcache`) and the top (`bb_soc`)

Both memories are 4096 bytes, the cache size of the reference configuration.
They are built as arrays that always hit: there are no tags, no misses and no
refill, because nothing is defined about the memory that would sit behind a
cache. A program and its data must each fit in 4 KiB, and cycle counts contain
no miss penalties. The instruction memory has a second read port, used only
for `bb` words when the core is built with `BB_PORT`.

`bb_soc` wires the core to the two memories. It adds a load port for filling
them while the core is held in reset:

- `load_sel` = 0 writes the instruction memory, 1 the data memory;
- `load_addr` is a byte address;
- `load_data` is a 32-bit word.

Parameters:

| parameter | default |
|---|---|
| `IMEM_BYTES` | 4096 |
| `DMEM_BYTES` | 4096 |
| `RESET_PC` | 0 |
| `FD_DELAY` | 0 |
| `BB_INFO_STAGE` | 2 |
| `BB_PORT` | 0 |

`FD_DELAY` inserts that many dummy stages between fetch and decode. It exists
for studying how BasicBlocker's cost grows with pipeline length: each stage
delays every branch outcome and every `bb` size by one cycle on its way back
to fetch. A loop closed by a branch that is the last instruction in its block
then costs two more cycles per iteration per stage. A loop-counter loop costs
at most one more. 0 is the plain five-stage core.

`BB_INFO_STAGE` sets where a fetched `bb`'s size and flags return to the fetch
unit:

| value | taken from | cycles from `bb` fetch to its first body word |
|---|---|---|
| 2 (default) | EX/MEM, like branch outcomes | 3 |
| 1 | ID/EX, forwarded right after decode | 2 |
| 0 | IF/ID, by bit-mask decode of the fetched word | 1 |

Each step saves one cycle on every block switch that waits for its `bb`.
Branch outcomes always come from EX/MEM.

`BB_PORT` = 1 goes further: the fetch unit reads each `bb` through the
instruction memory's second port, in parallel with the current block's
body. It requests the word as soon as `T` is certain. The word is decoded
by bit mask in the next cycle and goes straight into `P`. A `bb` then never
takes a fetch slot and never enters the pipeline, and `BB_INFO_STAGE` has no
effect. A sequential block of n instructions costs n cycles. A block switch
that waits for a branch starts one cycle after the branch outcome reaches
fetch.

After reset the core fetches the `bb` at `RESET_PC`. It runs until EBREAK
(`halted`) or an exception (`exc_flag`).

## Departures from the reference design and open points

- **Base core.** The reference design modifies an existing soft core. Here the
  5-stage pipeline is written from scratch. Its forwarding, stall and
  multiply/divide timing are this design's own, so cycle counts are
  comparable in structure but not identical.
- **Caches.** The caches are plain 4 KiB memories (see above).
- **Shortcuts for the `bb` size.** The three proposed shortcuts are options,
  all off by default (`BB_INFO_STAGE` and `BB_PORT`, see above). Which of them
  the evaluated core had is not stated; the default follows the published
  timing diagram. Not built: fetching a block's first body word before its
  size is known, which is safe because every block holds at least one
  instruction.
- **Enforced BB only.** A backwards-compatible mode, in which code outside
  any `bb`'s range runs with the old, immediate control-flow semantics, is
  described as an option but not built: a block without a `bb` always raises
  cause 4.
- **`B` is one bit.** The multi-bit branch counter is only suggested as an
  extension and is not built.
- **Exceptions stop the core.** Saving and restoring the BasicBlocker state
  across interrupts is not defined, so there are no interrupts.
- **Choices of this design**, where the definition is silent:
  - the encodings;
  - the not-taken T value and the link value;
  - the moment a pending exception is raised;
  - saturation of the loop counts;
  - the lowest-set priority among end flags;
  - the wait for an in-flight `lcnt`.
- **Programs.** The benchmark programs the design was evaluated with (Embench,
  Coremark, a pointer-chasing kernel) need a compiler that emits `bb`. They
  are not included, and most of them would not fit in 4 KiB of instruction
  memory.

## Files

- `rtl/bb_pkg.sv`: shared types: `bb_info_t`, `ctrl_t`, `exc_t`, opcodes.
- `rtl/bb_decoder.sv`, `rtl/rv32_decoder.sv`: decode of the new and the
  standard instructions.
- `rtl/alu.sv`, `rtl/regfile.sv`, `rtl/branch_unit.sv`: datapath.
- `rtl/bb_fetch_unit.sv`, `rtl/loop_counter_unit.sv`, `rtl/bb_checker.sv`: the
  BasicBlocker logic.
- `rtl/icache.sv`, `rtl/dcache.sv`: the memories.
- `rtl/bb_core.sv`: the pipeline.
- `rtl/bb_soc.sv`: the top.
- `tb/tb_<block>.sv`: one self-checking testbench per block. Each prints
  `TB_RESULT checks=N failures=M`.
- `tb/tb_asm_pkg.sv`: functions that assemble instructions for the tests.
- `tb/tb_bb_soc.sv`: the end-to-end test at default sizes. It runs:
  - a program with sequential blocks, a branch-closed loop, a call and
    return, a load-use stall, forwarding and a counted loop;
  - the fetch timings listed above;
  - five programs that each break one rule and must stop with the right
    exception.

  It fails if any of the mechanisms (stall, forwarding, early `bb` fetch,
  block switch, loop-counter jump-back, control-flow resolution, `lcnt` wait,
  exceptions) never occurs. Run it with `+trace` for a per-cycle fetch log.
- `tb/tb_bb_port.sv`: the same programs on a default SoC and, alongside, one
  built with `BB_PORT`. The second must end with the same registers, data
  memory and exception.
- `tb/tb_workloads.sv`: the two kernels above.
- `tb/tb_pipeline_length.sv`: three loop kernels on every combination of
  `FD_DELAY` = k = 0..3 and `BB_INFO_STAGE` = s = 0..2, and on k = 0..3 with
  `BB_PORT`. It checks the sums and the loop periods:

  | loop | period (cycles) | with `BB_PORT` |
  |---|---|---|
  | branch second of 6 | max(7, 5 + s + 2k) | max(6, 5 + k) |
  | loop counter, 3 words | max(4, 2 + s + k) | 3 |
  | branch last of 5 | 8 + s + 2k | 8 + k |

## Behaviour on two kernels

`tb/tb_workloads.sv` runs two benchmark kernels, written by hand in
BasicBlocker form, on the default configuration and checks their results.
A second SoC built with `BB_PORT` runs each kernel alongside and must produce
the same data memory.

| kernel | cycles | words fetched | cycles with `BB_PORT` | note |
|---|---|---|---|---|
| bitwise CRC-32 of 256 bytes | 15631 | 14091 | 12811 | inner 8-step loop on a loop counter; outer loop closed by a block holding only its branch |
| 16x16 integer matrix product | 31690 | 31095 | 27031 | k and j loops on loop counters (nested), i loop closed by an early branch |

In the matrix product almost every cycle fetches a useful word, although
nothing is ever fetched speculatively. In the CRC, most of the loss (about 6
cycles per byte) comes from the outer loop's one-instruction branch block. Its
branch cannot be scheduled any earlier, because the block before it is the
counted inner loop.

With `BB_PORT` the `bb` words (2562 and 4642 of them) no longer take fetch
cycles, which saves 18% and 15% of the cycles.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/bb_pkg.sv tb/tb_asm_pkg.sv tb/tb_bb_soc.sv \
    --top-module tb_bb_soc -Mdir obj_tb_bb_soc -o sim
./obj_tb_bb_soc/sim
```

Replace `tb_bb_soc` with any other testbench name to run that block's test.
The testbenches read no files. Programs are assembled in SystemVerilog with
`tb_asm_pkg` and written through the load port, so a new test program is a
list of calls such as `bb(3, 1, 0, 0)`, `addi(1, 0, 5)`, `beq(1, 2, -16)`.
