# HTS — a hardware task scheduler for accelerator-rich systems

A chip with many small, function-level accelerators (an FIR filter, an FFT,
a vector dot product, ...) has a scheduling problem. Someone has to decide
which accelerator runs which piece of work, and when, while respecting the
data dependencies between pieces. Doing this in software on the host CPU
costs an interrupt and some bookkeeping for every task, and that overhead is
large next to accelerator runtimes of a few hundred cycles.

This design moves the scheduling into hardware. It borrows the organisation
of an out-of-order processor and applies it one level up:

| out-of-order CPU       | this scheduler                                     |
|------------------------|----------------------------------------------------|
| instruction            | task: "run function *f* on memory region *A*, write region *B*" |
| functional unit        | accelerator (several per function class)           |
| architectural register | memory region number                               |
| register renaming / scoreboard | Memory Tracker (region → in-flight writer) |
| reservation stations, CDB | reservation stations per class, completion bus with a ticket-lock arbiter |
| branch prediction + reorder buffer | not-taken prediction + Task Lookup Buffer redirecting speculative outputs to a scratch area of memory |

The CPUs write a small program of 128-bit instructions into the scheduler's
task queue. Besides tasks, the program may contain register arithmetic,
loops, jumps and conditional branches. The scheduler runs the program by
itself: it dispatches tasks as soon as their inputs are ready, runs
independent tasks in parallel, and keeps going speculatively past branches
whose condition is not yet known. It tells the CPUs when each task is done.

The RTL is synthesizable SystemVerilog, one module per file in `rtl/`. The
testbenches are in `tb/`.

## Instruction format

Every instruction is 128 bits:

| bits     | field         | use for tasks | use for control instructions |
|----------|---------------|---------------|------------------------------|
| [7:0]    | accelerator ID / opcode | function class 0..N-1 | 0xF0 add, 0xF1 mul, 0xF2 mov, 0xF3 jump, 0xF4 if, 0xF5 lbeg, 0xF6 lend |
| [23:8]   | input region  | region read   | operand A / immediate |
| [31:24]  | input size    | size          | operand B register |
| [47:32]  | output region | region written| destination register / branch offset |
| [55:48]  | output size   | size          | – |
| [59:56]  | task ID       | returned in the completion notice | – |
| [63:60]  | process ID    | returned in the completion notice | – |
| [67:64]  | control       | bit 0: region fields name registers | `if`: [1:0] condition, [3:2] branch kind |
| [127:68] | metadata      | passed to the accelerator | – |

The field positions and the instruction set (`task`, `add`, `mul`, `mov`,
`jump`, `if`, `lbeg`, `lend`) follow the published description. The numeric
opcodes and the meaning of the control bits are this implementation's own
choices, because no encoding was published:

- `mov` writes the immediate `in_region` into `R[out_region]`; with control
  bit 0 set it instead copies register `R[in_region]` into `R[out_region]`,
  the register-to-register move the instruction list describes.
- `add` and `mul` compute `R[out_region] = R[in_region] op R[in_size]`.
- `jump` loads the PC with `in_region`.
- `lbeg n, r` sets `R[r] = n` and remembers the loop start. `lend r`
  decrements `R[r]` and jumps back while iterations remain. Loops nest up
  to `LOOP_DEPTH` deep.
- `if` compares a condition word with `R[in_size]` (EQ, NEQ, GE or LE). If
  the branch is taken, the PC moves forward by `out_region`. The branch kind
  says where the word comes from:
  - register-read: `R[in_region]`;
  - memory-read: region `in_region` in memory;
  - bus-read: region `in_region`, which an in-flight task is still writing.

A task with control bit 0 set takes its input and output regions from the
registers named in its region fields. Inside a loop, this lets each
iteration work on a different buffer. Region numbers are 16 bits and name
whole buffers. Two tasks depend on each other only when a region number
matches exactly. Address ranges are never compared.

Example, a four-iteration loop (fields in the order
opcode, in-region, in-size, out-region, out-size, task ID, process ID,
control):

```
mov  58 0 2 0 1 0 0      R2 = 0x58
mov  75 0 6 0 3 0 0      R6 = 0x75
lbeg 4  4 0 0 4 0 0      R4 = 4, loop start
add  4  2 5 0 5 0 0      R5 = R4 + R2
add  4  6 7 0 6 0 0      R7 = R4 + R6
iir  5  3 7 3 7 0 1      IIR from region R5 to region R7
lend 0  4 2 0 8 0 0      R4 -= 1, repeat
```

## Pipeline

```
 CPUs ──push──▶ task_fetch ──▶ task_decode ──task──▶ task_dispatch ──▶ reservation_station ×N ──▶ accelerators
                   ▲  PC          │   ▲ gpr_file        │  │  │            ▲ busy      │
                   └──redirect────┘   │                 │  │  │        acc_status_reg │
                                  branch_unit ◀─────────┘  │ task_tlb                  │ done
                                      ▲                 mem_tracker                    ▼
                                      └──────────── completion bus (CDB) ◀── cdb_arbiter
```

**task_fetch.** The queue keeps the whole program, so that loops and
branches can jump backwards. The PC indexes it. `clear` starts a new
program. The queue holds `TQ_DEPTH` instructions.

**task_decode + gpr_file.** Decode handles one instruction per cycle.
- It executes register, loop and jump instructions itself.
- It handles register-read branches with a one-cycle bubble.
- It hands memory-read and bus-read branches to the branch unit.
- Tasks go to dispatch. The PC moves on only when dispatch accepts the task.

**task_dispatch.** Dispatch handles one task per cycle:
1. Take a free tag. There are `NUM_TAGS` tags, and a tag is the
   scheduler's internal name for a task.
2. Map the input region through the TLB, then look it up in the Memory
   Tracker. A hit means an in-flight task writes that region: the new task
   waits for that task's tag.
3. Map the output region through the TLB, then record it in the Memory
   Tracker under the new tag.
4. Write the task into the reservation station of its class.

Dispatch stalls when no tag, station entry or (while speculating) TLB slot
is free.

**mem_tracker.** The tracker has one entry per tag, so it cannot overflow.
When a newer task writes a region, it replaces the older writer of that
region, so readers always wait for the youngest writer. An entry clears
when its task completes. A lookup in the same cycle as the producer's
completion reports no hit, so no wake-up is lost.

**reservation_station.** There is one station per accelerator class,
holding `RS_DEPTH` entries.
- An entry waits until its producer's tag appears on the completion bus.
- Each cycle, the station sends the oldest-indexed ready entry to the
  lowest-numbered idle accelerator of its class.
- All stations work in parallel, so several tasks can start in the same
  cycle.

**acc_status_reg (ASR).** The ASR records which accelerators are busy and
which tag each one is running. It also drives:
- `acc_abort`, for squashed tasks;
- `acc_pwr_en`, which powers an accelerator while it is busy or its class
  has waiting work.

**cdb_arbiter.** Accelerators that finish raise a request and hold it. Each
request takes a ticket, and tickets are served strictly in order, one
completion per cycle. Requests that arrive in the same cycle are ordered by
accelerator index. Each completion on the bus does four things:
- wakes the waiting stations;
- clears the ASR busy bit;
- frees the tag and its tracker entry;
- sends a notice (`done_valid`, task ID, process ID) to the CPUs.

## Speculation

This is the hardest part. A task writes memory directly, so a task started
on a wrong path cannot simply be discarded like a register result.

1. **Prediction.** A memory-read or bus-read `if` is predicted not taken.
   The branch unit opens a speculation, which raises `spec_mode` and
   assigns a speculation ID. Decode continues along the fall-through path.
   - A memory-read branch reads its word at once.
   - A bus-read branch first waits for its producer's tag on the completion
     bus, then reads.
   - The Memory Tracker decides which case applies. A branch whose
     condition region has an in-flight writer waits for it, whatever kind
     the instruction declares.
2. **Redirected outputs.** While speculating, every task's output region is
   replaced by a slot of the *Transactional Memory* (TM). Slot *i* of the
   TLB is region `TM_BASE + i*TM_SLOT`.
   - Later tasks that read a redirected region are sent to the slot.
   - The Memory Tracker sees slot numbers, so dependencies through
     speculative data work as usual.
   - When all `TLB_DEPTH` slots are taken, dispatch stalls.
3. **Mis-speculation (branch taken).** Squash proceeds in four steps:
   - The TLB drops every entry of that speculation, which throws the TM
     data away without touching memory.
   - `kill_mask` names all speculative tags for one cycle. Waiting entries
     leave their stations.
   - Running accelerators get `acc_abort`. Their tags are freed, without a
     CPU notice, when they report back.
   - Decode jumps to the branch target.
4. **Correct speculation (branch not taken).** The speculative TLB entries
   become committed, and the CPUs have already seen notices flagged
   `done_spec`. Readers of those regions keep being redirected to the TM
   slots. Once the TLB is full, nothing speculates and no task is in
   flight, the TLB copies every committed slot back to its real region
   (`wb_*` port, one slot at a time) and frees it. Dispatch stalls meanwhile.

Only one branch can be outstanding. While speculating, decode handles only
task instructions; register, loop and branch instructions wait for the
resolution. Therefore nothing but TLB entries and tasks ever needs undoing,
and the register file needs no checkpoint. One consequence shows in the
audio workload below: a branch followed directly by a loop gains nothing
from speculation.

With `SPECULATE=0`, decode simply waits at each memory-read or bus-read
branch.

## Top-level interface (`hts_top`)

| group | signals | protocol |
|-------|---------|----------|
| CPU | `push_valid/push_ready/push_instr`, `clear` | valid/ready push of instructions |
| CPU | `done_valid`, `done_task_id`, `done_pid`, `done_spec` | one-cycle completion notice |
| accelerator *a* | `acc_task_valid[a]`, `acc_task[a]` | one-cycle task delivery (mapped regions, sizes, metadata) |
| accelerator *a* | `acc_done_req[a]` / `acc_done_ack[a]` | held until acknowledged; also used after an abort |
| accelerator *a* | `acc_abort[a]`, `acc_pwr_en[a]` | abort pulse, power enable |
| memory | `mem_rd_req/mem_rd_region/mem_rd_valid/mem_rd_data` | branch condition read; request held until valid |
| memory | `wb_valid/wb_src/wb_dst/wb_size/wb_done` | TM slot copy-back; held until done |
| status | `idle`, `spec_mode`, `events` | `events` flags each mechanism for counting |

Accelerator *a* belongs to class `a / ACC_PER_CLASS`. Class numbers follow
the ten DSP functions used in the evaluation:

| class | function | cycles per task |
|-------|----------|-----------------|
| 0 | real FIR | 921 |
| 1 | complex FIR | 3696 |
| 2 | adaptive FIR | 4384 |
| 3 | IIR | 2450 |
| 4 | vector dot | 53 |
| 5 | vector add | 131 |
| 6 | vector max | 55 |
| 7 | 256-point FFT | 18673 |
| 8 | 64-point DCT | 874 |
| 9 | correlation | 753 |

The cycle counts matter only to the testbench models.

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| `NUM_CLASSES` | 10 | the ten functions above |
| `ACC_PER_CLASS` | 2 | the evaluation's main configuration (1 and 3 also studied) |
| `NUM_TAGS` | 16 | chosen; matches the 4-bit task ID field |
| `RS_DEPTH` | 4 | chosen |
| `TQ_DEPTH` | 64 | chosen |
| `NUM_GPR` | 16 | chosen (a register number fits one hex digit) |
| `LOOP_DEPTH` | 4 | chosen |
| `TLB_DEPTH` | 8 | chosen |
| `TM_BASE`, `TM_SLOT` | 0xF800, 256 | chosen |
| `SPECULATE` | 1 | speculation is the proposed mode |

At the defaults, synthesis gives about 3.8k cells, 6k flip-flop bits and
the 8 kbit instruction queue.

## Where this RTL departs from, or adds to, the original description

- **Memory-read branches.** These read their condition word through a
  read port. In the original, they spawn a memory-read task.
- **Reorder window.** The original lets Task Dispatch reorder tasks within
  a window fixed at design time. Here dispatch hands tasks over in program
  order. The reordering happens in the reservation stations, so the window
  is the `NUM_CLASSES × RS_DEPTH` station entries (40 at the defaults),
  also bounded by the `NUM_TAGS` task IDs.
- **Dispatch width.** The original makes it a design parameter. Here it is
  fixed at one task per cycle; issue from different stations is parallel.
- **Copy-back.** The original says the scheduler stalls and copies TM data
  back when the TLB fills. This design waits until the TLB is full, nothing
  is speculative and nothing is in flight, then copies every committed slot.
  The copy itself happens outside, through the `wb_*` port.
- **Single speculation level.** Only one speculation is open at a time, and
  non-task instructions are not decoded speculatively. The original does
  not say how nested branches or speculative register updates are handled.
- **Power management** is only named in the original. The enable rule here
  is this design's own.
- **Not included:** the accelerators, the Transactional Memory storage, the
  CPUs, the memory and the interconnect. Only their interfaces appear at the
  top's ports.

## Simulation

Every testbench is self-checking. It ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing -Irtl rtl/hts_pkg.sv rtl/*.sv tb/acc_model.sv tb/tb_hts_top.sv --top-module tb_hts_top
./obj_dir/Vtb_hts_top
```

For the workload runs, add `tb/hts_bench.sv` and use `--top-module tb_workloads`.
The unit testbenches `tb/tb_<module>.sv` need only `rtl/hts_pkg.sv` and
the module under test. The exception is `tb_task_decode`, which also uses
`task_fetch` and `gpr_file`.

- **`tb_hts_top`** runs the scheduler at its default size, with 20
  accelerator timing models (`tb/acc_model.sv`) and a memory model. It
  loads six programs:
  - independent tasks;
  - read-after-write chains;
  - the loop;
  - the 12-instruction branch example, not taken (commit, then copy-back
    of 8 TM slots);
  - the same example, taken (squash and abort);
  - a register-read branch, a bus-read branch and a TLB overflow stall.

  It counts every mechanism on `events` and fails if any of them never
  occurs.
- **`tb_workloads`** runs four configurations side by side (1, 2 and 3
  accelerators per class with speculation; 2 without):
  - the nine synthetic benchmarks (no, same-class, cross-class and random
    dependencies; a loop with and without an outside dependency; branches
    taken or not taken, with and without a dependency);
  - an audio-compression program (correlate, then a threshold branch,
    then 2–8 bands of either three FIRs or FFT → 3× vector dot → inverse
    FFT on the FFT class).

  Each run checks its results in memory, its notices and its cycle count
  against bounds from the critical path and the accelerator count.
  Examples at 8 bands in the frequency domain: 299,614 / 150,500 / 113,216
  cycles with 1 / 2 / 3 accelerators per class. A bus-read branch whose
  prediction is right saves the producer's latency: 18,735 against 19,649
  cycles without speculation. Across configurations it also checks that
  the cycles saved by extra accelerators grow with the number of bands,
  and that the two branch outcomes of the audio program take different
  times.
- The unit testbench of the decoder checks that a register-read branch
  holds the decoder for exactly one cycle more than a plain instruction.

In the accelerator model, a finished task writes its input region number
into its output region. This lets the testbenches follow data through
chains, TM slots and copy-back.
