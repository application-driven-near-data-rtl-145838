# SSAM: a similarity-search accelerator in the logic layer of stacked memory

Finding the k nearest neighbours of a query vector among millions of stored vectors is
limited by memory bandwidth. Each stored vector is read once, compared with the query,
and thrown away. A die-stacked memory cube has much more bandwidth inside it than on
its external links. It is split into 32 vaults, and each vault has its own controller at
roughly 10 GB/s, so 320 GB/s in total, against 240 GB/s for the four external links.

The SSAM design puts a small accelerator beside every vault controller. Each accelerator
holds a few simple processing units. Every unit scans its share of the vectors stored
in that vault and keeps its own top-k list in hardware. The host broadcasts the program
and the query to all units. It then merges the short per-unit lists into the global
answer. The host never streams the dataset itself.

This repository holds synthesizable SystemVerilog for the logic-layer part of such a
module:

- the processing unit and all of its parts;
- the sharing of one vault port among the units of an accelerator;
- the module top that places one accelerator at each of the 32 vaults.

The cube itself is not included. That means the DRAM layers, the vault controllers, the
switch and the serial links. Its connection points are ports on the top. A behavioural
vault model in `tb/` stands in for it in simulation.

## Hierarchy

```
ssam_module                  32 x accelerator, host configuration port with broadcast
└─ ssam_accelerator          NUM_PU units sharing one vault
   ├─ ssam_vault_arbiter     round-robin vault sharing, response steering, memory bypass
   └─ ssam_pu  (x NUM_PU)    one processing unit
      ├─ ssam_imem           2 KB instruction memory (512 words)
      ├─ ssam_decoder        instruction -> control word
      ├─ ssam_regfile  x2    32 scalar registers, 8 vector registers
      ├─ ssam_alu            scalar ALU lane
      ├─ ssam_vector_alu     VLEN lanes of ssam_alu
      ├─ ssam_scratchpad     32 KB, rows of VLEN words
      ├─ ssam_mem_if         vault access with a prefetch buffer
      ├─ ssam_stack          20-entry hardware stack
      └─ ssam_priority_queue x PQ_COUNT, chained top-k hardware
ssam_pkg                     opcodes, control word, event record, assembler function
```

| Parameter | Default | Meaning | Origin |
|---|---|---|---|
| `NUM_VAULTS` | 32 | accelerators per module | vault count of the memory cube |
| `NUM_PU` | 4 | units per vault | chosen (published totals of 80–320 cores mean 2.5–10 per vault) |
| `VLEN` | 4 | 32-bit lanes per vector | the 4-lane design point; 2, 8 and 16 were also studied |
| `SPAD_WORDS` | 8192 | scratchpad, 32 KB | published |
| `IMEM_WORDS` | 512 | instruction memory, 2 KB | published |
| `STACK_DEPTH` | 20 | stack entries | published |
| priority-queue depth | 16 | entries per queue | published |
| `PQ_COUNT` | 2 | chained queues per unit, so k ≤ 32 | chosen (typical k is 1–20) |
| `PF_ENTRIES` | 4 | prefetch lines per unit | chosen |

## The processing unit

A unit is a single-issue processor. One instruction stream drives both a scalar datapath
and a `VLEN`-lane vector datapath. All data are 32-bit integers, treated as fixed point by
software. Binary vectors pack 32 dimensions into a word.

### Pipeline

There are three stages:

1. **Fetch** reads the synchronous instruction memory.
2. **Execute** decodes, reads the registers, runs the ALUs, and accesses the scratchpad,
   memory, stack and queues.
3. **Write-back** writes the register files.

The write-back result is forwarded into execute, for both scalar and vector registers.
A vector instruction can therefore use the result of the one before it with no bubble.
This is how vector operations are chained here.

Branches are resolved in execute. The fetch address is redirected in the same cycle,
so a taken branch costs no bubble.

The pipeline stalls whenever the memory interface is waiting for the vault.

### Instruction format

All instructions are 32 bits wide:

```
 31      26  25  24   20 19   15 14   10 9        0
 | opcode | V |   rd   |  rs1  |  rs2  |          |     register form
 | opcode | V |   rd   |  rs1  |      imm[14:0]   |     immediate form (sign-extended)
```

`V` = 1 selects the vector version where one exists. `ssam_pkg::enc` and `enc_r` assemble
instructions, and the testbenches use them to build programs.

| Group | Instructions | Notes |
|---|---|---|
| arithmetic | ADD SUB MULT POPCOUNT, ADDI SUBI MULTI | S/V; MULT keeps the low 32 bits |
| logic | OR AND NOT XOR, ANDI ORI XORI | S/V |
| shift | SR SL SRA | S/V; shift amount from rs2/imm bits [4:0] |
| fused | FXP | S/V; `rd += popcount(rs1 ^ rs2)`, for Hamming distance on packed bits |
| control | BNE BGT BLT BE, J | compare `R[rd]` with `R[rs1]`, then jump to `pc+imm`; J jumps to absolute `imm` |
| stack | PUSH, POP | PUSH `R[rs1]`; POP into `rd` |
| moves | SVMOVE, VSMOVE | scalar → lane `imm` of `V[rd]`; lane `imm` of `V[rs1]` → scalar |
| memory | LOAD STORE, MEM_FETCH | S/V; address `R[rs1]+imm` in words; MEM_FETCH prefetches a line |
| queue | PQUEUE_INSERT, PQUEUE_LOAD, PQUEUE_RESET | see below |
| end | HALT | stops the unit and raises `done` |

The opcode numbers are in `ssam_pkg.sv`. Everything about the format is this design's own
choice. This includes HALT, the branch semantics and register 0 reading as zero.

### Address map

Addresses are word addresses:

- Below `SPAD_WORDS` (8192), LOAD and STORE go to the unit's scratchpad.
- At or above it, they go to the vault at the same address.

Vector accesses must be aligned to `VLEN` words. Software normally keeps the following in
the scratchpad:

- the query;
- parameters written by the host;
- the top of any index structure;
- the result area.

The stored vectors stay in the vault.

## Top-k in hardware: the priority-queue chain

The priority queue lets a unit keep its k best candidates without any sorting code.
Each queue is a shift register of 16 (id, value) entries kept in ascending value order,
with empty entries at the tail.

`PQUEUE_INSERT` (id = `R[rs1]`, value = `R[rs2]`) works in one cycle:

1. Every entry compares itself with the new value.
2. Entries at or behind the insertion point shift one place toward the tail.
3. The new tuple drops into the gap.

An entry is "behind" the insertion point when it holds a larger value or is empty. The
tuple pushed out of the last entry is the queue's eviction.

Queues are chained: the eviction of queue *i* is the insert of queue *i+1* in the same
cycle. The chain therefore behaves like one sorted list of 16·`PQ_COUNT` entries.

`PQUEUE_RESET imm` clears every queue and enables the first `imm` of them (0 enables all).
A disabled queue passes its input straight through to its eviction output. Enabling only
one queue therefore keeps exactly 16 entries.

`PQUEUE_LOAD rd, rs1, imm` reads the entry at chain position `R[rs1]`. It returns the
value when `imm[0]` = 1 and the id otherwise. Empty entries read as all ones.

Values are compared unsigned, and the smallest distance is kept. Within one queue, equal
values keep arrival order. Across a chain boundary, equal values may come out in a
different order. The set of kept values is still exact. An assertion checks that every
queue stays sorted.

## Memory interface and prefetching

A linear scan reads every vector once, in address order. A unit therefore has no cache.
Instead, `ssam_mem_if` keeps a small buffer of `PF_ENTRIES` lines of `VLEN` words each:

- `MEM_FETCH` requests a line ahead of use without stalling.
- A LOAD that hits the buffer completes at once.
- A LOAD that misses requests the line and stalls the pipeline until it arrives.
- A vector load frees the line it used, because scanned data are not read again.
- A new line goes into a free entry if there is one, else into the round-robin victim.

Freeing lines on use matters. With plain round-robin replacement, prefetched lines were
evicted before use, and the scan ran about 40% slower.

Stores write through to the vault with a per-lane mask.

Requests use a valid/ready handshake. Each carries a tag naming its buffer entry, so
responses may come back in any order. Assertions check that a request holds steady until
it is accepted.

## Sharing a vault

`ssam_vault_arbiter` joins the units of one accelerator to their vault controller:

- It grants one request at a time, round-robin, and holds the grant until that request is
  accepted.
- It extends each tag with the unit number and uses the returned tag to steer the
  response.
- The host's own memory port is arbitration input `NUM_PU`.

With `accel_en` = 0, the units are cut off and the vault port belongs to the host alone.
The module is then ordinary memory. A module with the accelerators unused still works as
a normal memory module, which is the point of the bypass.

## Driving the module from the host

All control goes through the configuration port of `ssam_module`. One request takes one
cycle, and read data appear on `cfg_rdata` one cycle later. `cfg_vault` and `cfg_pu` pick
a unit; the value 8'hFF in either field addresses all of them for writes.

| `cfg_sel` | Target | Use |
|---|---|---|
| 0 | instruction memory, word `cfg_addr` | write the program |
| 1 | scratchpad, word `cfg_addr` | write query and parameters, read results (only while the unit is idle) |
| 2 | control | write address 0 with bit 0 set to start; read address 0 = {busy, done}, address 1 = cycles of the last run |

A search runs in five steps:

1. Write the dataset into the vaults through the `h_*` memory ports.
2. Broadcast the program and the query.
3. Write each unit's own slice bounds.
4. Broadcast start, then wait for every `pu_done`.
5. Read each unit's k results from its scratchpad and merge them.

`pu_events` pulses once per occurrence of each internal event: memory stall, forwarding,
taken branch, queue insert, chain eviction, prefetch hit, push, pop and halt. It is
meant for performance counters and for the testbenches.

## The example kNN program

`tb/ssam_tb_pkg.sv` contains `knn_program`, a hand-assembled linear-scan kernel that
supports three distance metrics:

| Metric | Method |
|---|---|
| Euclidean (squared) | SUB, MULT, ADD on vectors |
| Hamming | FXP on packed bits |
| Manhattan | SRA/XOR/SUB absolute value |

The kernel works as follows:

1. It reads its slice bounds, dimension count, k and metric from the scratchpad.
2. It enables only as many queues as k needs.
3. It prefetches the next vector while it computes the current one.
4. It reduces the lanes with VSMOVE and scalar adds, then inserts (index, distance) into
   the queue.
5. At the end it copies the top k into the scratchpad.
6. It uses PUSH and POP in its prologue and epilogue to save state.

Together, the program uses every mechanism of the unit.

## Verification

Each module has a self-checking testbench in `tb/`. Each compares the module against
values computed independently in the testbench and ends with a `TB_RESULT` line giving
checks and failures. Each also has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_ssam_alu`, `tb_ssam_vector_alu` | every operation on random operands |
| `tb_ssam_priority_queue` | random inserts into single queues and chains against a sorted model, disable and clear |
| `tb_ssam_stack` | random push/pop against a model, overflow and underflow |
| `tb_ssam_regfile`, `tb_ssam_imem`, `tb_ssam_scratchpad` | random traffic against array models, write masks |
| `tb_ssam_decoder` | every opcode |
| `tb_ssam_mem_if` | hits, misses, prefetch, stalls and stores against a random-latency vault |
| `tb_ssam_pu` | the kNN kernel on 40 vectors of 16 dimensions, for each metric, against a software top-k |
| `tb_ssam_vault_arbiter` | fairness, tag routing and bypass under random ready/valid |
| `tb_ssam_accelerator` | four units searching one shared vault |
| `tb_ssam_module` | the full 32-vault module at default parameters, end to end |

`tb_ssam_module` runs the whole module with every parameter at its default:

- 32 vaults of 4 units, which is 128 units.
- A memory-bypass phase first.
- A broadcast search over 24 vectors per unit, with 16 dimensions and k = 20, so the
  queue chain is used. The testbench merges the 128 partial lists and checks them
  against a software top-k.
- A second query with mixed metrics.

It counts every mechanism listed above, plus vault contention, broadcast and bypass. A
mechanism that never happens counts as a failure. The Verilator build takes a few
minutes, and the run takes seconds. One query takes about 1,600–2,000 cycles.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert rtl/ssam_pkg.sv -y rtl -y tb \
    tb/ssam_tb_pkg.sv tb/tb_ssam_pu.sv --top-module tb_ssam_pu
./obj_dir/Vtb_ssam_pu
```

For the testbenches that do not use `ssam_tb_pkg`, leave out `tb/ssam_tb_pkg.sv`.

## Where this design departs from, or adds to, the published design

- **Instruction encoding, HALT, branch semantics, address map, pipeline depth.** None of
  these are published. The choices above are the simplest that run the kernels.
- **Units per vault and queues per unit.** Neither is published per vault. 4 units and
  2 queues are chosen defaults. Both are parameters.
- **Prefetch buffer.** Its size and replacement rule are this design's own.
- **Vault arbitration and bypass.** Round-robin sharing and the `accel_en` mode switch are
  this design's own realisation of "units share the vault controller" and "the module can
  still act as plain memory".
- **Vector unit.** It has no vector-length register, masking or cross-lane reduction
  instruction. Reduction goes through VSMOVE.
- **Memories.** The memories are plain arrays. A real implementation would use compiled
  SRAM macros.
- **Overflow.** Stack overflow and underflow drop the access and raise a flag. An
  assertion in the unit reports them.
- **Not built.** The vault controllers, DRAM, switch, links and host software are not
  built. Their interfaces are only assumed: a line-wide valid/ready request with tagged
  responses.

## Capacity for the published workloads

At the default parameters, the three evaluated datasets all fit the hardware:

| Dataset | Vectors | Dims | k | Query in scratchpad | Queues | Dataset |
|---|---|---|---|---|---|---|
| GloVe | 1,183,514 | 100 | 6 | 100 words | 1 | 473 MB |
| GIST | 1,000,000 | 960 | 10 | 960 words | 1 | 3.84 GB |
| AlexNet | 1,000,000 | 4096 | 16 | 4096 words (16 KB) | 1 | 16.4 GB |

- Every query fits the 8192-word scratchpad.
- Every k fits in one 16-entry queue.
- Every dimension count is a multiple of 4.

The vault addresses are 32-bit word addresses, which is far more than one vault's share
of a 16 GB module. The AlexNet set at 32 bits per dimension only just fills 16 GiB. The
Hamming versions shrink every dataset 32-fold.

Cosine similarity needs division. Division must be done in software by shift and
subtract, since the ALU has no divider. Index-based approximate search is supported by
the stack and scratchpad. It is software only and has not been simulated here.
