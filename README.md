# A coarse-grain out-of-order core in SystemVerilog

A conventional out-of-order core tracks every instruction on its own. It renames every
register, searches one large issue window each cycle, and retires from a per-instruction
reorder buffer. That is fast, but those structures burn most of the core's energy.

The coarse-grain out-of-order (CG-OoO) organisation moves most of that work to the level
of a **code block**, which is a basic block found by the compiler:

- Blocks are predicted, dispatched, tracked and committed as units.
- Inside a block, instructions issue almost in order. A small window at the block's head
  lets a few of them overtake older ones.
- Many blocks are in flight at once, each in its own **block window**. Parallelism comes
  from running blocks side by side, not from one big window.
- Values that live and die inside a block go to a small local register file and skip
  rename entirely. Only values that cross block boundaries are renamed into a shared
  global register file.

This repository holds a synthesizable RTL model of such a core, with a self-checking
testbench for each unit and an end-to-end testbench that runs a small program on the
whole core.

## Code blocks and the `head` instruction

Every block starts with a `head` instruction. Fetch, prediction and allocation act on it
before they see the rest of the block. A head is one 64-bit word:

| bits    | field        | meaning |
|---------|--------------|---------|
| [63:58] | opcode       | `6'h3F` |
| [57]    | HasCtrl      | 1 if the block ends in a control operation |
| [56:52] | BlkSize      | number of non-head instructions in the block |
| [51:0]  | fall-through | byte offset from this head to the next block's head |

Every instruction is 8 bytes. Two relations follow from this layout:

- **Next block if not taken:** `PC_next = PC_head + fall-through`.
- **Head of a block, seen from its control op at position `idx` (counting from 0 after the
  head):** `PC_head = PC_ctrl - idx*8`. Branch resolution uses this to update the
  predictor, which is indexed by the head's PC.

Blocks whose head has `HasCtrl = 0` never read the predictor. The next block is simply the
fall-through block.

### The rest of the instruction set

The block model only needs each register operand to carry a **Register Rename Flag**:
global (renamed) or local (not renamed). Everything else below is this design's own small
64-bit ISA:

| bits    | field |
|---------|-------|
| [63:58] | opcode |
| [57]    | rd is global |
| [56:52] | rd |
| [51]    | rs1 is global |
| [50:46] | rs1 |
| [45]    | rs2 is global |
| [44:40] | rs2 |
| [31:0]  | immediate, sign-extended |

Opcodes:

| value | instructions |
|-------|--------------|
| `00` | NOP |
| `01`–`07` | ADD SUB AND OR XOR SLL SRL |
| `08` | ADDI |
| `09` | SLLI |
| `0A` | MUL |
| `10` | LD (`rd = mem[rs1+imm]`) |
| `11` | ST (`mem[rs1+imm] = rs2`) |
| `20`–`22` | BEQ BNE BLT (target = this instruction's PC + imm) |
| `23` | JMP (PC + imm) |
| `24` | CALL (PC + imm; rd gets the fall-through block PC) |
| `25` | RET (target in rs1) |

Register ids:

- A local register id selects one of the 20 entries of the window's local register file.
- A global id selects one of 32 architectural registers.

`tb/cgooo_asm_pkg.sv` contains small functions that build these words. It is the easiest
way to write new test programs.

## Pipeline

```
 fetch ──► decode ──► allocate/rename/steer ──► [ block windows x9 ] ──► EUs x12 ──► write-back
   ▲          │                                     │   ▲ issue            │ ld/st
   │          ▼ (heads only)                        │   └ scheduler/cluster ▼
 Block PC ◄─ block predictor                        │                     LSU (LQ 64 / SQ 32)
 Buffer      (BTB, hybrid, RAS)                     ▼
                                         BROB (16 blocks) ──► commit whole blocks
```

There is one register stage between each pair of units.

- **Fetch** (`fetch_unit`) reads up to four words per cycle from the current block. A
  fetch group never crosses into the next block. At a block's end, fetch takes the next
  block PC from the **Block PC Buffer** (`block_pc_buffer`).
  - The prediction is made once per block, when the head is decoded, and is queued in that
    FIFO.
  - A zero entry means "no prediction was needed". Fetch then continues with the
    sequential block.
- **Block prediction** (`bpu`) looks up:
  - the BTB: 4096 entries, 8 ways, 16-bit tags (`btb`);
  - a hybrid direction predictor: gshare, bimodal and a meta chooser, each 4096 two-bit
    counters, with a 13-bit global history (`hybrid_bp`);
  - a return address stack (`ras`).

  The BTB holds each block's control type as well as its target.
  - Conditional blocks take the direction predictor's answer.
  - Jumps and calls are always taken. A call also pushes its fall-through PC.
  - Returns pop the stack.
- **Allocation** (`block_allocator`) gives each head a free block window and a BROB entry.
  - Windows are picked round-robin.
  - If no window is free, the head waits, and counts a *block-window stall*.
  - The non-head instructions are then written into that window's instruction queue.
- **Rename** (`rename`) renames global operands only.
  - Local operands pass through unchanged. A fetch group with no global operands costs no
    rename-table access.
  - Each new physical register is taken from the GRF segment next to the destination
    window where possible. It falls back to other segments when that segment is full.
  - Each global write is also recorded in the block's BROB entry, in slots GW0 to GW9.
    This allows at most 10 global writes per block.
- **Block windows** (`block_window`): there are nine, in three clusters of three. Each
  holds one block:
  - a 10-entry instruction queue (`instruction_queue`);
  - a 4-entry **Head Buffer** (`head_buffer`);
  - a 20-entry **Local Register File** with two read and two write ports (`lrf`).
- **Issue** (`instruction_scheduler`): each window offers at most one instruction per
  cycle. Each cluster's scheduler places the offers on its four execution units, lowest
  window first.
- **Execute** (`execution_unit`): one cycle for every operation. Control operations
  compute the real next block and compare it with the predicted one.
- **Memory** (`lsu`): see below.
- **Commit** (`brob`): each BROB entry counts down BlkSize as its instructions complete. The
  oldest block commits when its count reaches zero.
  - Committing frees the previous physical registers recorded in GW0 to GW9, and updates
    the committed rename map.
  - The block window is freed as soon as all of its block has arrived and issued. Late
    local write-backs carry the old block number and are ignored.
    This is independent of commit.

## Head Buffer and Skipahead

This part is the hardest to get right and the most important to understand.

- A block's instructions leave its instruction queue in order, into the Head Buffer.
- Any Head Buffer entry may issue if all of these hold:
  - its sources are ready: a global source's GRF ready bit is set, and a local source's
    LRF *valid* bit is set;
  - its local destination has no write outstanding (LRF *pending* bit clear);
  - it has no true, anti or output dependence on any older entry still in the Head Buffer.
- The oldest entry needs only the first two conditions.
- One instruction issues per window per cycle, and the freed slot is refilled from the
  queue. An issue of a non-oldest entry is counted as a *Skipahead* issue.

Each LRF register therefore has two scoreboard bits:

- **valid**: set by a write, cleared when a new writer issues or the window gets a new
  block.
- **pending**: set when a writer issues, cleared by its write.

The pending bit is needed in addition to valid. A local register that has never been
written in this block has no value yet. Its first writer must still be able to issue, and
only a writer already in flight should block it.

Dependences are compared on the renamed operand, which is the flag plus the id. A global
and a local register with the same number do not conflict.

## Global registers and segments

The GRF (`grf`) has 256 64-bit registers in nine segments of 29, one per block window.
Segment `s` covers registers `[29s, 29s+29)`. The last segment is shorter: 256 is not a
multiple of nine.

- Every window can read every segment.
- Rename's segment preference only decides where values live.
- Each register has a ready bit:
  - rename clears it;
  - the write-back sets it;
  - a squash and recovery set all of them again.

## Memory ordering

The LSU has a 64-entry load queue and a 32-entry store queue. Every entry carries its
block's sequence number (BROB slot plus a wrap bit) and its position in the block. Age is
compared on that pair.

- **Loads** execute as soon as their address is known.
  - A load searches the store queue for the youngest older store to the same 8-byte word
    whose data is known, and forwards from it.
  - Otherwise it goes to the data port, with a tag.
- **Stores** wait in the store queue until their block commits, then drain to memory one
  per cycle.
- **Violation check.** When a store executes, it searches the load queue for younger
  loads to the same word that have already executed. If it finds one, the oldest such load
  causes a **memory squash**.
  - That squash restarts at the head of the load's own block, because recovery works in
    whole blocks.
  - The load's block and everything younger are discarded.
- Only one memory operation per cluster per cycle is placed on an execution unit.

## Squash and recovery

Both kinds of squash go through the same path:

- A control misprediction from an execution unit, or a memory violation from the LSU, is
  raised.
- If both are raised in the same cycle, the older one wins.

The sequence:

1. The BROB, the windows and the LSU drop every block younger than the faulting one.
   - On a control squash the faulting block itself stays: its branch was correct up to
     its end.
   - On a memory squash the faulting block is dropped too.
2. Fetch stops, and the Block PC Buffer and front-end registers are flushed.
3. The surviving older blocks finish and commit.
4. When the BROB is empty, the speculative rename map is copied from the committed map,
   all physical registers not in it are freed, and all GRF ready bits are set.
5. Fetch restarts at the correct block. After a control squash that is the resolved
   successor. After a memory squash it is the squashed load's block.

Waiting for an empty BROB keeps recovery simple and exact. The cost is a few extra cycles
per squash.

## Configuration

All sizes are parameters of `cgooo_core`. The defaults are the main configuration:

| parameter | default | |
|---|---|---|
| `NUM_CLUSTERS`, `BW_PER_CLUSTER`, `EU_PER_CLUSTER` | 3, 3, 4 | 9 block windows, 12 EUs |
| `FETCH_W` | 4 | fetch/decode/rename width |
| `IQ_DEPTH`, `HB_ENTRIES`, `LRF_SIZE` | 10, 4, 20 | per block window |
| `NUM_PREGS`, `GRF_SEGS` | 256, 9 | |
| `BROB_ENTRIES` | 16 | blocks in flight |
| `LQ_ENTRIES`, `SQ_ENTRIES` | 64, 32 | |
| `BP_ENTRIES` | 4096 | per predictor table |
| `BTB_ENTRIES`, `BTB_WAYS` | 4096, 8 | |
| `RAS_DEPTH`, `PCBUF_DEPTH` | 16, 8 | this design's choice |

## Where the model departs from the original design, or fills in gaps

**Left out**

- The instruction cache, data cache and lower memory levels are not modelled.
  - The core has a combinational fetch port (`imem_*`).
  - Loads use a tagged request/response port (`dmem_*`) and may have any latency.
  - Committed stores leave on a write port.
- No energy or timing model is included.
- The pipeline is shorter than the 13 stages of the original evaluation. There is one
  register stage per unit, so a branch resolves about seven cycles after its block is
  fetched. Deeper stages were not needed for function and would only add delay.
- The original was evaluated with x86 code plus block heads. This model uses its own
  64-bit load/store encoding instead.

**Choices this design makes where the organisation leaves them open**

- The non-head instruction encoding and all opcodes.
- One-cycle execution for every operation, including MUL.
- One memory operation per cluster per cycle.
- No bypass network between execution units: results reach consumers through the
  register files, one cycle after execution.
- Round-robin window choice.
- The tournament organisation of the hybrid predictor.
- A per-set round-robin BTB replacement pointer.
- RAS and Block PC Buffer depths.
- The recovery sequence, which waits for an empty BROB, in full detail.
- All handshakes between the units.

**Limits**

- At most 10 global writes and 31 instructions per block. These follow from the GW0–GW9
  slots and the 5-bit BlkSize field. A compiler for this ISA must split longer blocks.
- A fetch group never spans two blocks. This costs fetch bandwidth on short blocks.
- Memory disambiguation works on whole 8-byte words. There are no sub-word accesses.

## How much has been verified

- Each unit has its own testbench in `tb/`, named `tb_<unit>.sv`. Each one:
  - drives random and directed stimulus;
  - compares against a reference model written independently inside the testbench;
  - prints `TB_RESULT checks=N failures=M`.
- Each testbench was also run against a deliberately broken copy of its unit, and failed
  there.
- `tb_cgooo_core` runs the core at its default size. The program is a search loop over an
  array, followed by blocks in which a load overtakes an older store to the same address.
  It checks the final registers and memory. It also counts each mechanism described above
  and fails if any never happened:
  - block commits;
  - control squashes and memory squashes;
  - recoveries;
  - Skipahead issues;
  - several windows issuing in one cycle;
  - block-window stalls;
  - heads that skip the predictor;
  - rename-free groups.
- The model has not been checked against real benchmark programs. That would need a
  compiler that forms blocks, marks local and global registers and emits heads.
- Synthesis of the full core at the default size is slow with open-source tools. The
  predictor and BTB tables, and the GRF, are written so that they map to memories.

## Simulating

Each testbench builds with plain Verilator 5. The package must come first; the assembler
package is needed only by the core testbench:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb \
    rtl/cgooo_pkg.sv tb/cgooo_asm_pkg.sv $(ls rtl/*.sv | grep -v cgooo_pkg) \
    tb/tb_cgooo_core.sv --top-module tb_cgooo_core -Mdir obj
./obj/Vtb_cgooo_core
```

- Replace the testbench file and top-module name to run any unit testbench.
- Add `+verilator+seed+N` to get a different random stream.
- The core testbench finishes in well under a minute at the default size.

To try a different configuration, override the `cgooo_core` parameters where the
testbench instantiates it:

- The testbench's memory models assume `FETCH_W = 4` and 64 load-queue entries, through
  the widths of `imem_data` and `dmem_tag`. Change them together.
- `instruction_scheduler`'s testbench already shows a second configuration: six windows
  sharing two EUs.
