# SIMF: flushing a core's private state with one instruction

Timing side channels leak a process's secrets through state it leaves in a
core's private structures. Caches, TLBs and branch predictors are the main
ones: the next process on the core can time its own accesses and see what
the victim touched. Operating systems that enforce *temporal isolation*
therefore flush all of that state whenever the core passes to another
security domain. With ordinary instruction sets this takes long software
routines: set/way cache-maintenance loops, one instruction per structure,
and barriers between them.

SIMF (single-instruction multiple-flush) replaces those routines with one
privileged instruction, `FLUSHX`. In one execution it:

* writes back and invalidates the L1 data cache,
* invalidates the L1 instruction cache,
* invalidates the L1 instruction TLB, the L1 data TLB and the L2 TLB,
* clears the branch predictor (BTB valid bits, BHT history register and
  counter table, RAS pointer),
* optionally clears the integer register file.

This RTL implements the SIMF hardware for a scalar in-order 5-stage
pipeline (IF, ID, EX, ME, WB). It contains the controller that schedules the
flushes, every structure that is flushed (each with its flushing hardware),
and a pipeline skeleton through which `FLUSHX` travels. The rest of the
host core's datapath (ALU, FPU, load/store unit, CSRs, page-table walker)
and the memory system behind the caches are not part of it. Their
connection points are ports of the top module, `simf_core`.

## The sphere of flushing

The default parameters are the evaluated RV64 configuration:

| Structure | Size | Module | What the flush does | Flush time |
|---|---|---|---|---|
| L1 D-cache | 32 KiB, 8-way, 64 B lines (512 lines) | `l1_dcache` | walks all lines; writes back each valid and dirty line; resets valid and dirty | 1 cycle per clean line, 1 + memory wait per dirty line |
| L1 I-cache | 32 KiB, 8-way, 64 B lines | `l1_icache` | resets every valid bit | 1 cycle |
| L1 ITLB / L1 DTLB | 32 entries each | `tlb` | resets every valid bit | 1 cycle |
| L2 TLB | 128 entries | `tlb` | resets every valid bit | 1 cycle |
| BTB | 28 entries | `btb` | resets every valid bit | 1 cycle |
| BHT | 512 two-bit counters, 8-bit global history | `bht` | clears the history register and all counters | 1 cycle |
| RAS | 6 entries | `ras` | resets the stack pointer (stack empty) | 1 cycle |
| Register file | x1..x31, 64 bit | `regfile` | clears all registers (if `rf_flush_en`) | 1 cycle |

The replacement pointers of the caches, TLBs and BTB are reset too, so no
replacement state of the previous owner survives.

Only the D-cache needs more than one cycle. Its lines may be dirty, and a
dirty line must reach memory before its valid bit is dropped. The walk
handles one line at a time. It reads the line's {tag, valid, dirty} entry;
if the line is valid and dirty it sends the data line to memory and waits
for acceptance; then it resets both bits and moves to the next line. The
walk time is therefore `#lines + (memory wait x dirty lines)` cycles.

## Ordering: why FLUSHX is scheduled the way it is

Two data dependences fix the order of the flushes:

* **I-cache after D-cache.** After the I-cache is invalidated, instructions
  are refetched from memory. The newest copy of code written by the program
  may still sit dirty in the D-cache, so the D-cache write-back must finish
  first (read after write).
* **DTLB after D-cache.** A D-cache write-back may need a translation from
  the DTLB, so the DTLB must not be invalidated before the D-cache walk is
  done (write after read).

No flush may start before `FLUSHX` is known to be executed. The flushes are
also placed as late as possible in the pipeline. Together this gives the
schedule that `simf_ctrl` implements:

| Stage | Flushes issued | Cycles |
|---|---|---|
| IF, ID, EX | none | 1 each (ID longer, see below) |
| ME | L1 D-cache walk | walk time + 2 |
| WB | everything else, in the same cycle | 1 |

Because the I-cache and DTLB flushes happen in WB, they come strictly after
the D-cache walk that ends in ME.

### Pipeline control

Two rules keep programs correct around the flush:

1. **Older instructions commit first.** `FLUSHX` waits in ID until EX and ME
   are empty. The instruction just ahead of it may be in WB in that last
   cycle, since it commits there. So the instruction ahead writes back in
   the cycle before `FLUSHX` enters EX.
2. **Younger instructions see the flushed state.** From the cycle `FLUSHX`
   is decoded in ID until its WB cycle, the fetch port is closed. In the WB
   cycle the controller gives a redirect to `pc + 4`. The next instruction
   is fetched in the cycle after `FLUSHX` writes back.

With a one-cycle ME stage, the timing is (cycle numbers as in the
`simf_core_tb` checks):

```
cycle     0   1   2   3   4   5   6   7   8
i0        IF  ID  EX  ME  WB
FLUSHX        IF  ID  ID* ID* EX  ME  WB
i2                .   .   .   .   .   .   IF      * = stall, . = fetch held
```

In the real design ME lasts for the whole D-cache walk. During that time
ME, EX and ID are frozen and WB receives bubbles.

Once `FLUSHX` has left ID, nothing in the controller can cancel it. The
whole flush is therefore atomic: an interrupt can be taken before or after
it, but never in the middle of it.

`FLUSHX` is privileged. In U-mode the controller reports it on
`illegal_instr` and executes nothing; the host core's trap logic then takes
over.

## Instruction encoding and configuration

The base instruction set has no opcode for `FLUSHX`, so this design uses the
RISC-V *custom-0* major opcode with every other field zero:
`FLUSHX = 32'h0000_000B` (`simf_pkg::FLUSHX_INSTR`).

Flushing the register file destroys program state, so software must save
the registers before `FLUSHX` and restore them after. This is why
register-file flushing can be turned off. Here it is turned off by a static
input, `rf_flush_en`, not by a separate opcode.

## Modules

All files are in `rtl/`, one unit per file:

* `simf_pkg` holds the widths (XLEN 64, 32-bit physical addresses, Sv39
  virtual addresses, 64-byte lines) and the `FLUSHX` decode function. It
  also holds the types: `wb_flush_t` (one bit per single-cycle flush),
  `tlb_req_t`/`tlb_resp_t`, and `sof_status_t` (how many entries of each
  structure hold state).
* `simf_ctrl` is the SIMF controller described above.
* `l1_dcache` is a write-back, write-allocate cache with the flush walk.
  Its handshake is `flush_start` (taken only when `flush_ready`), then
  `flush_busy`, then a `flush_done` pulse.
* `l1_icache`, `tlb`, `btb`, `bht`, `ras` and `regfile` each take a
  one-cycle `flush` input.
* `simf_core` is the top. It contains the four pipeline registers (ID, EX,
  ME, WB), the controller and all the structures. It brings out their
  core-side ports (cache requests, TLB lookups and fills, predictor lookups
  and updates, register reads and writes) and the line-wide memory ports of
  both caches.

### Interfaces of `simf_core`

* **Fetch (IF).** The fetch source presents `fetch_pc`/`fetch_instr` with
  `fetch_valid`. The instruction is in IF in the cycle `fetch_ready` is
  high. After `redirect_valid`, fetch resumes at `redirect_pc`.
* **Commit (WB).** `commit_valid`/`commit_pc`/`commit_instr` report the
  instruction in WB. Instructions other than `FLUSHX` pass through the
  stages and are otherwise not executed here.
* **Caches, core side.** A request is taken on `valid && ready`. The answer
  comes with `resp_valid`, two cycles later on a hit. Stores write one
  64-bit word under a byte mask.
* **Caches, memory side.** Each request moves a 512-bit line. A write
  completes on the `req_valid && req_ready` handshake. A read returns its
  line with `resp_valid`.
* **TLBs, BTB and BHT.** Lookups are combinational. Fills and updates act
  at the clock edge. A fill or update in the same cycle as a flush is
  dropped.
* **Status.** `sof_status` counts valid lines and entries, non-zero BHT
  counters, the BHT history, RAS occupancy and non-zero registers. The
  testbenches use it to show that nothing is left after `FLUSHX`.

## Where this design goes beyond what SIMF specifies

SIMF fixes what each structure's flush does, the sizes, the stage schedule
and the pipeline rules. Everything else was chosen here:

* The organisation of the flushed structures. The caches are physically
  addressed, fill an invalid way first and otherwise use a round-robin
  victim, and hit in 2 cycles. The TLBs and BTB are fully associative with
  round-robin replacement. The BHT is indexed gshare style (pc XOR an 8-bit
  global history). The RAS is a circular stack.
* The D-cache walk goes one line at a time in index order, with a
  single-line memory port. Its cost per line (the α of the schedule) is
  1 cycle for a clean line and 1 + memory wait for a dirty one. The
  published prototype measured about 16,000 cycles for a full dirty cache
  over its memory system, about 31 cycles per line. Here the time depends
  on the memory's acceptance latency.
* The `FLUSHX` encoding, the U-mode check and the `rf_flush_en` input.
* Only the integer register file is flushed. This matches the size of the
  published register-flush hardware (about 2,000 flip-flops, close to
  31 x 64 bits).
* One core. A multi-core system has one `simf_core`'s worth of state per
  core, each with its own `FLUSHX`.
* The host datapath, the page-table walker, the L2 / interconnect and main
  memory are outside this RTL.

## Verification

Each module has a self-checking testbench in `tb/`. Each one compares
against an independent reference model and prints
`TB_RESULT checks=N failures=M`. Each has a watchdog.

| Testbench | What it checks |
|---|---|
| `l1_dcache_tb` | Full 512-line cache filled with half dirty lines, then flushed. The walk must take exactly `512 + LAT x dirty + 1` cycles. Exactly the dirty lines must be written back, with their data. Later loads must miss. It also checks dirty eviction. |
| `l1_icache_tb` | Miss and hit data, a one-cycle invalidate, misses after it, and a refill overtaken by a flush (must not be installed). |
| `tlb_tb` | The 32- and 128-entry TLBs: lookups, in-place refill, round robin, flush. |
| `btb_tb`, `bht_tb`, `ras_tb`, `regfile_tb` | Random traffic against reference models, then the flush. |
| `simf_ctrl_tb` | The controller on its own, cycle by cycle: ID stall, ME start handshake and hold, the WB flush vector, redirect, and the U-mode case. |
| `simf_core_tb` | The whole core at its default size, over three domain switches. It checks the pipeline timing above, the ME length, write-back completeness, that every structure is empty afterwards, the rf-disabled case and illegal U-mode `FLUSHX`. It counts each mechanism (ID stall, ME stall, held fetch, write-back, redirect, rf flush, illegal). |
| `flush_overhead_tb` | The flush-overhead case study: a 32 KiB buffer written, so all 512 lines are dirty, then one `FLUSHX`. It reports 1541 cycles from fetch to write-back, for one dynamic instruction, with a 2-cycle memory wait. |
| `lmbench_config_tb` | The same three domain switches as `simf_core_tb`, in the smaller configuration: 16 KiB caches and no L2 TLB. The D-cache walk is now 256 lines. The L2 TLB port must never hit, even after fills. |
| `prime_probe_tb` | The Prime+Probe cache timing attack at the D-cache port of the full-size core. The attacker fills all 512 lines. The victim loads one line into each set named by a random 64-bit secret. The attacker then times a reload of its lines. Without `FLUSHX` the sets with a slow load must equal the secret bit for bit. With `FLUSHX` before the return to the attacker, all 512 reloads must miss, whatever the secret. Each run prints a map of the first samples. |

`tb/line_mem_model.sv` is a behavioural memory with a configurable
acceptance latency. It is used by the cache and core testbenches.

### Running a testbench with Verilator

```
verilator --binary --timing --assert -Wno-fatal --top-module simf_core_tb \
    rtl/simf_pkg.sv $(ls rtl/*.sv | grep -v simf_pkg) tb/*.sv
./obj_dir/Vsimf_core_tb
```

Put the package first; the order of the other files does not matter. Every
testbench runs in a few seconds at full size.

### Changing the configuration

All sizes are parameters of `simf_core` (`DC_SETS`, `DC_WAYS`, `IC_SETS`,
`IC_WAYS`, `ITLB_ENTRIES`, `DTLB_ENTRIES`, `L2TLB_ENTRIES`, `BTB_ENTRIES`,
`BHT_ENTRIES`, `BHT_HIST`, `RAS_DEPTH`). For example, 16 KiB 8-way caches
are `DC_SETS = IC_SETS = 32`. `L2TLB_ENTRIES = 0` builds the core without
an L2 TLB: its lookup port then never hits and it holds no state. These two
settings together give the smaller configuration that SIMF was also
evaluated in. Set counts must be powers of two; TLB, BTB and RAS sizes need
not be.
The flush time of every structure except the D-cache stays at one cycle
whatever its size. The D-cache walk grows with the number of lines.
