# Dual-issue CVA6S+ execution slice and C910 standard-interface shell

This RTL covers two open-source RISC-V cores. It holds the logic that changes when each is taken from its
original form to a high-IPC core that drops into a standard, modular SoC:

* **CVA6S+**: a dual-issue, in-order RV64 core derived from CVA6. Issuing two instructions per cycle only pays
  off if the second one is rarely held back. The parts here remove the common reasons it would be held back:
  * a second ALU that can consume the first ALU's result in the same cycle;
  * register renaming so that two in-flight writers of one register do not stall;
  * precise pairing rules for the FPU, which shares a write-back port with the second ALU;
  * a two-level branch predictor.

  The core keeps a 64 KB, 2-way, virtually indexed L1. Its set index therefore reaches three bits above the
  4 KB page offset. A small predictor guesses those three bits before translation is done.
* **C910 shell**: the XuanTie C910 is an out-of-order core that originally used vendor-specific debug and bus
  behaviour. The shell adds the RISC-V debug CSRs and the halt/resume sequencing. It also adds a converter that
  turns the core's non-standard *decrement* AXI bursts into ordinary incrementing bursts.

Everything these two cores reuse without change is not here: fetch, decode, load/store unit, multiplier/divider,
FPU datapath, MMU, caches, the C910 pipeline itself, interrupt controllers and the SoC. It is reached through
ports. The top level, `ramp_top`, places the CVA6S+ parts and the C910 parts side by side. The two halves share
only clock and reset, because in a real system they belong to two different cores.

```
                      ramp_top
  +--------------------------------------------------------------+
  |  cva6sp_core (issue / execute / commit slice)                |
  |    rename_table  regfile x2  dual_issue_check  alu_pair      |
  |    bht_2level    8-entry scoreboard / ROB      branch unit   |
  |  aa_index_pred (L1 index-bit prediction)                     |
  |--------------------------------------------------------------|
  |  c910_debug_ctrl (dcsr/dpc/dscratch, halt, dret, wfi wake)   |
  |  axi_decr2incr   (decrement burst -> INCR burst)             |
  +--------------------------------------------------------------+
```

## The CVA6S+ issue slice (`cva6sp_core`)

The slice starts where decoded instructions arrive and ends at register-file write-back.

### Interface

* Each cycle the front end offers two decoded instructions (`instr_t`, defined in `cva6sp_pkg`).
  * Slot 0 is the older one.
  * `instr_ack_o` says which of them issued. Slot 1 never issues without slot 0.
* The front end looks up branch predictions through `bp_pc_i` / `bp_taken_o`.
* A mispredicted branch raises `redirect_o` with the correct PC.
* The load/store unit, the multiplier/divider and the FPU are outside the slice:
  * the slice sends them a request (`ext_valid_o`, `ext_req_o`) tagged with the scoreboard entry;
  * they answer on `ext_wb_valid_i` / `ext_wb_i` whenever they finish.
* Retired instructions leave on the two `commit_*` ports, in program order.
* `perf_o` pulses one bit per event: dual issue, same-cycle ALU forwarding, WAW renaming, pairing blocked,
  write-back-port conflict, operand stall, scoreboard full and misprediction.

### Issue

Slot 0 issues when all of these hold:
* its source operands are available;
* its unit accepts the request;
* the 8-entry scoreboard has a free entry.

Slot 1 also needs all of these:
* `dual_issue_check` allows the pair;
* the scoreboard has a second free entry;
* slot 0 is not a mispredicted branch;
* its own operands are available. If slot 1 reads what slot 0 writes, that is only possible when both are ALU
  operations.

The pairing rules (`dual_issue_check`) are the core of the FPU integration:

| rule | reason |
|---|---|
| FPU with FPU never pairs | there is one FPU |
| FP store with FPU never pairs | together they need more FP read ports than the FP file's three |
| any other FP operation pairs with a non-FP one | the point of integrating the FPU |
| ALU 1 unavailable in a cycle when the FPU writes back | ALU 1 and the FPU share one write-back port |
| one load/store, one multiply/divide, one branch per cycle | one unit of each |
| slot-1 branch does not pair with a slot-0 ALU/branch | branch unit shares the ALU 0 write-back port |

The shared port in the fourth row is why FP-heavy code can run slower on this core than on a single-issue one.
While the FPU drains results, integer instructions lose their second ALU.

### Write-back ports and the scoreboard

The scoreboard has four write-back ports:

| port | used by |
|---|---|
| 0 | ALU 0 and the branch unit |
| 1 | ALU 1, shared with the FPU |
| 2 | load/store unit |
| 3 | multiplier/divider |

Other details:
* The ALUs and the branch unit finish in the issue cycle.
* A store counts as complete once the load/store unit accepts it.
* The scoreboard doubles as the reorder buffer. Up to two finished entries at its head commit per cycle into the
  integer or FP register file (`regfile`: flip-flops, 2 write ports, register 0 reads zero in the integer file).

### Renaming and operand selection

`rename_table` keeps, for each of the 32 integer and 32 FP registers:
* a busy bit;
* the scoreboard tag of its youngest in-flight writer.

A second writer to the same register simply overwrites the tag. The first writer's result is still committed in
order, but no one reads it from the scoreboard any more, so the write-after-write case needs no stall. At commit,
an entry is cleared only if its tag still names the instruction that retires.

A source operand comes from the first of these that has it:
1. slot 0 in the same cycle: ALU to ALU only, through `alu_pair`;
2. an external unit writing back this cycle;
3. the finished result in the scoreboard entry named by the rename table;
4. the register file.

### Same-cycle ALU forwarding (`alu_pair`)

`alu_pair` chains two RV64I ALUs. When `fwd_a1_i` or `fwd_b1_i` is set, ALU 1 takes ALU 0's result, computed in
the same cycle, as that operand. The cost is two ALU delays in series on one path. In return, dependent integer
pairs such as `addi x5,x5,1; slli x6,x5,2` issue together.

### Branch handling and the two-level predictor (`bht_2level`)

Branches and jumps resolve in the issue cycle. On a misprediction the slice kills slot 1, redirects fetch and
trains the predictor. A misprediction is a wrong direction, or a wrong target for `jalr`.

The predictor has two levels:
* **Level 1**: a table of 128 entries holding a 3-bit history each. It is indexed by PC bits [7:1] and records
  the last three outcomes of the branches that map there. 128 × 3 bits is 48 bytes.
* **Level 2**: one pattern table of eight 2-bit saturating counters, indexed by that history and shared by all
  entries (a "PAg" organisation).

Prediction is the counter's upper bit. A resolved conditional branch:
1. moves its counter one step;
2. shifts its outcome into its entry's history.

Two ports serve the two fetch slots. There is one update per cycle.

## L1 index-bit prediction (`aa_index_pred`)

One way of a 64 KB, 2-way cache is 32 KB, so the set index with 64-byte lines uses address bits 14:6. Only bits
11:0 are the same in virtual and physical addresses. Bits 14:12 are only known after translation, and using the
virtual ones would let two virtual aliases of one physical line sit in different sets.

The unit keeps bits 14:12 of the last translated physical address and uses them as the upper index bits of the
next request (`req_index_o`). When that request's translation arrives:
* if the predicted bits match, `proceed_o` is raised and the access continues;
* otherwise `abort_o` is raised and `retry_index_o` gives the correct index.

In both cases the translated bits become the new prediction. Code that stays within one page, or within
physically contiguous pages, hits almost every time. A mismatch costs one retry. There is one request in flight
at a time.

## C910 debug support (`c910_debug_ctrl`)

The controller holds the RISC-V debug CSRs: `dcsr` (0x7b0, debug version 4), `dpc` (0x7b1), and `dscratch0`/`1`
(0x7b2/0x7b3).

It enters debug mode as an exception on the instruction in decode. The causes, highest priority first:
1. an `ebreak` enabled for the current privilege level by `dcsr.ebreakm/s/u`;
2. a pending halt request from the SoC's debug module;
3. a due single step.

When one occurs:
* the instruction is replaced (`dec_kill_o`);
* `dpc` takes its PC;
* `dcsr.cause` and `dcsr.prv` are written;
* the pipeline is flushed;
* fetch jumps to `HALT_ADDR` (default 0x800, the usual debug-ROM entry).

A halt request also wakes a core sleeping in `wfi`, as does a pending interrupt. `dret` flushes and redirects
fetch to `dpc`, and hands back the privilege level stored in `dcsr.prv`. Outside debug mode, accesses to these
CSRs are ignored and flagged on `csr_illegal_o`.

## Decrement-burst converter (`axi_decr2incr`)

The C910's bus can issue a *decrement* burst: the address names the highest beat, and each beat is one size
step lower. Standard AXI has no such mode. It is encoded here as the reserved `AxBURST = 2'b11`.

A decrement burst of `len+1` beats starting at `A` covers the same bytes as an INCR burst from
`A - (len << size)`, walked in the opposite order. The converter:
1. rewrites the address and burst type;
2. collects the burst's data (write data from the core, read data from the SoC) in an 8-beat buffer;
3. replays it in reverse order.

Other bursts take the same path without reversal. One read and one write can be in flight at a time, and bursts
are at most 8 beats: one 64-byte line on the 64-bit bus. The buffering adds one burst length of latency to each
decrement access, in exchange for simple, standard-conforming downstream traffic.

## Departures and open points

* **Conflicting store-queue size.** The published CVA6S+ block diagram gives the store queue 8 entries, while
  its parameter table gives 4. The load/store unit is not part of this RTL, so the conflict does not affect it.
* **Predictor second level.** The source describes the predictor only as two-level with per-entry history,
  128 entries and 3 bits. The shared pattern table is this design's reading. It is the only one that fits the
  48-byte figure quoted for the table.
* **Decoded-instruction format.** `instr_t` is this design's own format. All instructions are 4 bytes. There are
  no exceptions or interrupts in the CVA6S+ slice.
* **Pairing rules.** The one-unit-per-class rules for load/store, multiply/divide and branch are own choices that
  follow the core's unit counts.
* **Compressed instructions.** The slice assumes 4-byte instructions. Fetching and expanding 2-byte compressed
  instructions belongs to the front end, which is not included.
* **Top level.** It exists to compile, synthesize and test all parts together. It is not a system: the two halves
  are unconnected.

## Verification

Every module has a self-checking testbench in `tb/` that compares it with an independent model.

| testbench | what it checks |
|---|---|
| `tb_bht_2level` | every prediction against a software model of histories and counters, under random branch streams |
| `tb_rename_table` | busy/tag lookups under random allocation, release and flush, against a model |
| `tb_dual_issue_check` | all unit-class pairs with and without an FPU write-back, against the rule table |
| `tb_alu_pair` | random operations, with and without forwarding |
| `tb_regfile` | random reads and writes including register 0 and write-port clashes |
| `tb_aa_index_pred` | index, abort, proceed and retry index against a model |
| `tb_c910_debug_ctrl` | halt, ebreak, step, CSR access rules, dret, wfi wake; then 4000 cycles of random inputs against a reference model |
| `tb_axi_decr2incr` | random INCR and decrement bursts in both directions against a memory model that accepts only INCR |
| `tb_cva6sp_core` | random looping programs with three seeds; every retirement is compared with a reference execution |
| `tb_cva6sp_kernels` | three fixed kernels through the slice, checked the same way, with their IPC |
| `tb_ramp_top` | the whole top at default parameters |

`tb_cva6sp_core` drives the slice through `tb/cva6sp_prog_drv.sv`, which works as follows:
* **Program.** It generates a random looping program with branches, jumps, loads, stores, multiplies and FPU
  operations.
* **Front end.** It models a front end that follows the predictor's answers.
* **External units.** It models the external units with random latencies.
* **Commit check.** Every commit is checked in order against a reference execution of the program.
* **Event check.** Each of the eight `perf_o` events must occur.

Typical IPC is between 0.7 and 0.95. Loads, the FPU and the multiplier/divider are modelled with random
multi-cycle latencies.

`tb_cva6sp_kernels` uses the same environment with hand-written programs in place of random ones:

| kernel | load latency | what it shows | IPC |
|---|---|---|---|
| 4x4 integer matrix multiply | 1-2 cycles | pointer and counter updates pair with loads and multiplies | about 0.95 |
| FP chain with integer bookkeeping | 1-2 cycles | ALU pairs lose ALU 1 whenever an FPU result is written back | about 1.4 |
| 32-word sequential copy | up to 20 cycles | the in-order slice waits on every load | about 0.37 |

These runs are small stand-ins for an embedded benchmark suite and a streaming-memory benchmark. They are not
those benchmarks. Running real compiled programs needs the fetch, decode, load/store and cache logic, which this
RTL does not contain.

`tb_ramp_top` checks the whole top at its default sizes and counts every mechanism. It requires:
* all eight core events;
* index aborts and proceeds;
* a debug entry, a `wfi` wake-up and a `dret`;
* a decrement read and a decrement write, each converted and checked against memory.

The testbenches print `TB_RESULT checks=N failures=M` and stop on a watchdog if they hang.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/cva6sp_pkg.sv tb/tb_ramp_top.sv --top-module tb_ramp_top
./obj_dir/Vtb_ramp_top
```

Replace `tb_ramp_top` by any other testbench name to run that one. The package must come first on the command
line. All other files are found through `-I`, one module per file named after it. `-Wno-fatal` is needed
because the testbenches contain width-mismatch warnings in their random stimulus code. The RTL itself lints
clean apart from unused-bit notes, which are explained in each file's header.

A coarse synthesis of the top at default parameters gives about 1,900 word-level cells and 7,400 flip-flop bits.
Most of that is the CVA6S+ slice, whose scoreboard and two register files dominate.

## Parameters

| module | parameter | default | origin |
|---|---|---|---|
| `bht_2level` | `ENTRIES`, `HIST_BITS` | 128, 3 | published |
| `regfile` | `NR_ENTRIES`, `WIDTH` | 32, 64 | published |
| `regfile` | `NR_READ`, `NR_WRITE` | 4, 2 | write ports = commit width; reads own choice |
| `aa_index_pred` | `CACHE_BYTES`, `WAYS`, `PAGE_BITS` | 65536, 2, 12 | published |
| `aa_index_pred` | `LINE_BYTES`, `PLEN` | 64, 56 | own choice |
| `c910_debug_ctrl` | `HALT_ADDR` | 0x800 | own choice |
| `axi_decr2incr` | `DW` | 64 | published bus width |
| `axi_decr2incr` | `AW`, `IW`, `MAX_BEATS` | 64, 4, 8 | own choice |
| `cva6sp_pkg` | `NR_ISSUE`, `NR_COMMIT`, `NR_SB` | 2, 2, 8 | published |
