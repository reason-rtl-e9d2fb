# REASON plug-in accelerator (SystemVerilog)

REASON speeds up neuro-symbolic inference by sending the symbolic and
probabilistic half of the work, which runs badly on a GPU, to a small
accelerator that sits next to the GPU. The central idea is one reconfigurable
datapath for both kinds of work. Every processing core is a pipelined binary
**tree of two-input nodes**. For probabilistic circuits, HMM steps and sparse
products the tree computes sums and products. For SAT-style logic the same
tree's leaves evaluate clauses, and its upward path collects the implications
they produce. Its downward path broadcasts each new variable assignment to
every leaf. Both uses share register banks, an operand crossbar and the
shared memory.

This repository holds a synthesizable, simulation-verified model of that
design, with 12 cores of depth-3 trees, 64 register banks of 32 entries per
core and a shared scratchpad. It also holds a self-checking testbench for each
block.

## Block map

```
reason_top
 ├─ global_controller     execute command, neural_ready / symbolic_ready flags
 ├─ workload_scheduler    hands batch objects to idle cores
 ├─ global_interconnect   14 requesters -> 4 memory banks, round robin
 │   └─ shared_local_memory   64-bit words, 4 interleaved banks
 └─ pe_core x12
     ├─ reg_bank_file     64 banks x 32 regs, lowest-free write address
     ├─ benes_network     64x64 rearrangeable operand crossbar
     ├─ rte_tree          depth-3 tree of tree_node (8 inputs, 7 nodes)
     ├─ bcp_engine        symbolic mode
     │   ├─ clause_eval x8       one per tree leaf
     │   ├─ watched_literals_unit  watch lists, local clause SRAM
     │   └─ bcp_fifo            multi-push implication queue
     └─ dma_engine        LOAD / STORE / clause fetch
```

## Number format and conventions

- Datapath values are 16-bit unsigned fixed point with 15 fraction bits, so
  1.0 is `16'h8000`. Add and multiply saturate. Probabilities always stay in
  [0, 1], so no sign bit is needed.
- A literal is `{variable[7:0], negated}`. This allows 256 variables.
  Variable 0 is reserved, so literal codes 0 and 1 mean "empty slot".
- A clause record fits one 64-bit word. It holds four literal slots, filled
  from slot 0, and two 12-bit next pointers. Pointer `12'hFFF` means null.
- Reset is asynchronous and active low. Everything else is one clock domain.

## Tree engine (neural/probabilistic mode)

`tree_node` is one registered two-input unit. Its operations are NOP, ADD,
MUL, MAX (the comparator) and pass-A/pass-B. `rte_tree` arranges the nodes in
heap order:
- Node 0 is the root.
- Nodes 2k+1 and 2k+2 are the children of node k.
- Leaf node j reads operands 2j and 2j+1.

Each tree level is one pipeline stage, so a new operand set can enter every
cycle and its result comes out D=3 cycles later. The per-node operation codes
travel down the pipeline together with the data. Consecutive instructions can
therefore use completely different node functions. The tree also delays every
internal node's value to the root's output cycle, so that one write-back step
can save intermediate DAG values as well as the root.

## PE core: instructions, banks and crossbar

A core runs a program of wide VLIW words from its 256-entry instruction
memory. The instructions are:

| op | meaning |
|----|---------|
| EXEC | read up to 64 banks, route through the Benes network, run the tree, write selected node results back |
| LOAD | copy `count+1` shared-memory words starting at `in_base+addr` into banks `bank`, `bank+1`, ... |
| STORE | write one register to `out_base+addr` |
| SYM_CLEAR / SYM_RUN / SYM_STORE | clear the assignment, decide a literal and propagate, store the result word |
| HALT | end of object, core raises `done` |

How the parts of an EXEC fit together:
- **Register banks** (`reg_bank_file`): a write does not name its address. It
  lands in the lowest free register of its bank, and the write port reports
  that address. A register becomes free when an instruction reads it with its
  release bit set. Because execution is fully deterministic, a compiler can
  predict every address. The hardware never checks this.
- **Benes network** (`benes_network`): a 64-port, 11-stage network of 2x2
  switches. The instruction supplies all 352 switch bits, because any
  permutation is reachable but working out the settings is left to software.
  Outputs 0..7 feed the tree leaves. Stage s exchanges ports that differ in
  address bit `b = 5-s` for the first half and `s-5` after that. This is the
  in-place form of the recursive Benes construction.
- **Write-back**: tree node k writes into bank k ("one bank per node"). It
  writes only if its `wb_en` bit is set.
- **Timing**: an EXEC takes one cycle for the bank read, one for the
  registered crossbar output, then D tree cycles and one write. Independent
  EXECs issue back to back. The hardware does **not** detect read-after-write
  hazards between EXECs: the program must space dependent ones by the
  pipeline length. LOAD, STORE and symbolic instructions do wait until the
  tree has drained. This wait is called an interlock and is counted as an
  event.

## Symbolic mode: Boolean constraint propagation

This is the hardest part of the design. `bcp_engine` reuses the tree shape
with each leaf replaced by a `clause_eval` unit. Each `clause_eval` holds its
own copy of the 256-entry assignment.

### Watch lists

`watched_literals_unit` keeps a head table with one head pointer per literal
code, and a clause store. Slots 0 and 1 of each clause are its watched
literals. Each record carries `next0` and `next1`, the next clause in the
watch list of `lits[0]` and `lits[1]` respectively. Walking the list of a
literal means following whichever pointer matches that literal.

Pointers below 1024 are read from a local SRAM, one record per cycle. Larger
pointers are fetched from shared memory at `clause_base + pointer` through
the core's DMA engine; each such fetch counts as a *miss*. Watches are
static: they never move to another literal. Propagation is therefore exact
for 2-literal clauses. For longer clauses it can miss implications, but it is
never wrong.

### One DECIDE, step by step

1. **Broadcast.** The decided literal is written into every leaf's
   assignment copy. The delay is D cycles, modelling the trip down the tree.
2. **Walk.** The walk goes through the list of the literal that just became
   false. Each clause goes into a free *stage register*, one per leaf. When
   all 8 are full and another clause is ready, the watch-list unit is held
   (a *stall* event).
3. **Launch.** Staged clauses start together when the stage is full, or when
   the walk has ended, all leaves are idle and no broadcast is in flight.
   Each leaf scans one literal per cycle and reports SAT, UNIT (with the
   implied literal), CONFLICT or nothing.
4. **Root.** Results climb D levels. At the root, each UNIT literal is checked
   against the current assignment:
   - Already true: the literal is dropped (a *drop* event).
   - Already false: this is a conflict.
   - Otherwise it is a new implication.
5. **Bypass and queue.** One new implication is broadcast at once (*bypass*).
   Any others from the same cycle go into `bcp_fifo`, which accepts up to 8
   pushes per cycle (*queue* / *multi* events). Its depth equals the number
   of variables, so it can never overflow.
6. **Repeat.** When nothing is in flight, the next FIFO entry is broadcast
   and the next walk starts.
7. **Conflict.** On a conflict, the FIFO is flushed, the walk and any pending
   DMA fetch are aborted, and the command finishes with `conflict=1`.
   `n_assign` counts the assignments made.

UNASSIGN clears one variable so software can backtrack. CLEAR unassigns all
variables. Conflict analysis and clause learning are left to the host.

### SYM_STORE result word

`{value of var(lit) at [33:32], conflict at [16], n_assign at [8:0]}`

## System level

- **Memory.** `shared_local_memory` holds 64 Ki 64-bit words (512 KiB) in 4
  banks. The bank is the address mod 4. `global_interconnect` grants each bank
  to one of 14 requesters per cycle, round robin. The requesters are the 12
  cores, the controller and the host port. Read data returns exactly one cycle
  after the grant.
- **Scheduler.** `workload_scheduler` takes a batch of N objects. It starts
  object i on the first idle core with input base `in_base + i*in_stride` and
  output base `out_base + i*out_stride`.
- **Controller.** `global_controller` implements the host handshake:
  1. The host issues execute with the batch id, batch size, mode and the
     neural and symbolic buffer addresses.
  2. The controller polls the first word of the neural buffer until bit 0
     (`neural_ready`) is set.
  3. It runs the batch with the program entry pc for the mode. Configuration
     registers 0..3 hold these entry pcs; registers 4 and 5 hold the strides.
  4. It writes `{1, batch_id}` (bit 32 set) into the first word of the
     symbolic buffer.
  5. It pulses `done`.

  `status_busy` and `status_batch_id` form the check-status interface.
- **Top level.** `reason_top` exposes:
  - the host memory port;
  - core configuration (`cfg_all` writes every core at once);
  - controller configuration and the execute command;
  - status, per-core busy/done and event pulses.

## Where this design departs from the paper

- **Tree size.** The paper's chosen configuration is tree depth 3, 64 banks
  and 32 registers, but one figure draws a 16-leaf tree. The stated depth 3
  is built. With one depth-3 tree per core, 12 cores have 84 nodes, not the
  80 the paper lists.
- **Unspecified formats.** The number format, literal and clause formats,
  instruction encoding, flag-word layout and memory size and banking are not
  given by the paper; the choices above are mine.
- **Watches.** Watches are static and there is no watch migration.
  Propagation is complete only for 2-literal clauses.
- **Not built:**
  - the per-core SIMD unit;
  - the MMU;
  - the DMA prefetcher;
  - hardware conflict analysis;
  - the compiler that produces programs and Benes settings;
  - the GPU side, which appears only as a memory port.
- **No hazard logic.** The hardware does not check EXEC hazards. As intended
  by the paper, the program must schedule around the pipeline.
- **Scheduling.** It is greedy: the next object goes to the first idle core.
- **On-chip SRAM.** After synthesis, the memories built total 8,114,176 bits, about
  1.01 MB. This covers the shared memory, the register banks, the clause SRAMs,
  the head tables and the instruction memories. The paper gives 1.25 MB in
  total but does not say how it is split.

## Simulating

Every testbench is self-checking and ends with
`TB_RESULT checks=<n> failures=<m>`. To build and run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/reason_pkg.sv tb/tb_bcp_engine.sv \
    --top-module tb_bcp_engine -y rtl -o sim
./obj_dir/sim
```

Replace `tb_bcp_engine` with any file in `tb/`. `tb_reason_top` is the full
system test:
- It uses 12 cores at full size.
- It runs batches of probabilistic-circuit objects and of symbolic objects.
  Some of the symbolic objects need clause fetches and some reach conflicts.
- It checks every result against a software model.
- It fails if any mechanism never occurred: interlocks, bypass, queueing,
  multi-implication cycles, misses, conflicts, polling, or use of every core.

Random stimulus uses `$urandom`. Add `+verilator+seed+<n>` to the run
command to change the seed.
