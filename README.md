# LTRF: a latency-tolerant two-level GPU register file

A GPU streaming multiprocessor keeps every thread's registers on chip. That way tens of
warps can be switched between without saving state. A larger register file would allow more
warps or more registers per thread. But dense memory cells (tunnel-FET SRAM, domain-wall
memory) that give 8x the capacity in the same area are also several times slower. A register
file on the critical path of every instruction cannot absorb that.

LTRF splits the register file in two:

* a **large, slow main register file** holds every register of every warp;
* a **small, fast register file cache** holds only the registers that the *active* warps
  need right now.

Software decides what "right now" means. The compiler cuts each kernel into
**register-intervals**: regions of code that together touch at most 16 registers. It places a
**prefetch operation** at the start of each interval. The prefetch carries a 256-bit vector
naming that interval's registers (its *working set*). Hardware moves the working set from the
main register file into the cache before the warp continues. Every operand read inside the
interval then hits in the cache, so the slow main file is only touched at interval
boundaries, where many warps can hide each other's latency.

The compiler's renumbering pass also gives the registers of one interval different
main-file banks. A prefetch can then read them in parallel.

This repository is RTL for the hardware half of that scheme, for one SM. The compiler half
is software and is not included: interval formation, register renumbering and dead-operand
bits. The testbench makes up programs that have the properties the compiler would give them.

## Configuration built

| Item | Value |
|---|---|
| Warps per SM | 64 (`MAX_WARPS`) |
| Architectural registers per warp | 256, each 1024 bits (32 threads x 32 bits) |
| Main register file | 16 banks x 1024 rows x 1024 bits = 2 MB (8x a 256 KB baseline) |
| Main-bank latency | 7 cycles (stands for 6.3x a 1-cycle baseline bank), not pipelined |
| Main-side crossbar | 16 x 16, 256-bit links: 4 beats per register |
| Active warps | 8, each owning one row (its *warp-offset*) in every cache bank |
| Register file cache | 16 banks x 8 rows x 1024 bits = 16 KB |
| Registers per interval | up to 16: one per cache bank |
| Operand collectors | 16, two source operands each, plus a destination |
| Collector-side crossbar | 16 banks to 32 operand ports, 1024-bit |

All sizes are parameters: `ltrf_pkg` holds the constants, and modules take counts as
parameters. Field widths in the shared structs are fixed at the maxima above, so parameters
can only shrink counts.

## How a register is found

This is the least obvious part of the design. Two indirections sit between an architectural
register number and its bits.

**In the main register file**, the location is fixed. Register `r` of warp `w` lives in main
bank `r[3:0]`, row `{w, r[7:4]}`. The compiler's renumbering chooses register numbers so that
registers used together have different low four bits. That is what makes a prefetch
conflict-free.

**In the cache**, the location is assigned when the register is loaded, in two parts:

* **Row = warp-offset** (3 bits). When a warp becomes active, it takes a free offset from a
  global allocator. All of its cached registers live in that row of the 16 cache banks.
* **Bank** (4 bits). Each warp has its own allocator of the 16 banks. Each register of the
  working set takes the next free bank. A warp therefore never has two registers in the same
  cache bank. Its (at most 16) operands can be read in parallel by different collectors.

Both allocators are the same unit, `addr_alloc_unit`. It is a pair of queues: an *unused*
queue that starts full (0..N-1), and an *occupied* queue that starts empty. An allocation
takes the head of *unused* and appends it to *occupied*. A release removes an ID from
*occupied* and appends it to *unused*.

The per-warp **warp control block** (`warp_control_block`) records the result:

* a 256-entry table of 4-bit bank numbers, with a valid bit per entry;
* the warp's 3-bit offset;
* the 256-bit working-set vector;
* the 256-bit liveness vector.

That is 256 x 5 + 3 + 256 + 256 = 1795 bits per warp, or 114,880 bits for 64 warps. The
table has two read ports, because most instructions read two registers. An instruction with
a destination needs a third lookup. The issue stage therefore reads the sources in one cycle
and the destination in the next.

## The three register movements

`warp_prefetch_unit` is the per-warp controller, and it is the one non-trivial state machine
(`S_IDLE`, `S_WB`, `S_REL`, `S_FILL`). Its three commands are:

1. **Prefetch** (the warp issued a prefetch operation). Write back the live registers of the
   finished interval. Release their cache banks. Clear the valid bits. Record the new
   working-set vector. Then load it.
2. **Deactivate** (the warp issued a long-latency operation, or exited). Write back the live
   registers, release the banks, and clear the valid bits. The working-set vector stays, so
   the warp knows what to reload.
3. **Activate** (the warp is given a warp-offset again). Load the recorded working set into
   the new row.

*Loading* goes through the working-set vector one register per cycle, lowest first. Each
register is given a bank and its table entry is written. The unit then issues the main
register file reads.

*Liveness* (the design's "LTRF+" mode, `LIVENESS_AWARE = 1`, the default) cuts the traffic
at both ends. A register becomes live when a result is written to it. It becomes dead when an
instruction reads it with its *dead-operand bit* set, meaning no later instruction needs the
value. Only live registers are written back. Only live registers are read back in. A dead
member of a new working set just gets a bank and is marked valid at once, since whatever it
holds is about to be overwritten. With `LIVENESS_AWARE = 0` every member of the set is
moved.

*Requests* to the main file go out one per grant of the **fill arbiter**. This is an 8-input
round-robin arbiter over the active warps, indexed by warp-offset. Each request is for the
lowest pending register whose main bank is idle. Registers in different banks therefore
overlap, and registers in the same bank serialize.

A fill sets its valid bit when the main bank reports it done. The command finishes, and the
warp may run, when nothing is pending and no transfer is in flight.

## Timing of one register transfer

A main bank (`main_rf_bank`) takes one transfer and is busy until it ends:

```
FILL:  accept | access x LAT | beat0 beat1 beat2 beat3 | done
WB:    accept | beat0 beat1 beat2 beat3 | access x LAT  | done
```

With `LAT = 7` and no crossbar contention, a transfer takes 11 cycles from acceptance to
`done`. A withheld crossbar beat adds one cycle.

The crossbar (`main_xbar`) has a round-robin arbiter per cache bank. The winning main bank
keeps that cache bank's port for four consecutive beats. Beat `k` carries 256-bit slice `k`,
which a FILL writes into the cache bank's fill port and a WB reads out of it. Different cache
banks are served in parallel.

## The scheduler

`two_level_scheduler` keeps each warp in one of these states:

* idle;
* pending (wants to be active);
* waiting (on a long-latency operation);
* activating;
* active;
* prefetching;
* deactivating;
* releasing its offset.

Among warps that are active, loaded, have nothing in flight and are not stalled, one is
picked round-robin each cycle to issue. Other rules:

* A **long-latency operation** marks the warp stalled. Once the operation's operands have
  been read, the warp is deactivated and its offset is freed for a pending warp. It becomes
  pending again when the operation completes.
* A **prefetch** pauses the warp until its new working set is loaded.
* **Exit** deactivates the warp for good.

One instruction per warp is in flight at a time. This design has no scoreboard.

## Operand collection and the issue path

`ltrf_top` ties everything together, in this order:

1. **Select.** The scheduler names a warp.
2. **Fetch.** The top asks for that warp's next instruction (`ifetch_*`).
3. **Locate sources.** A free operand collector is allocated with the source bank numbers read
   from the warp control block.
4. **Locate the destination** one cycle later.

A prefetch or exit goes straight to the warp's controller instead of a collector.

Each collector slot keeps the fields valid, register number, ready, warp-offset, bank and
value. It requests its cache bank through `rfc_operand_arbiter`, which has one round-robin
arbiter per bank and returns the data one cycle after the grant. A lost arbitration is a
**cache bank conflict**, and the slot simply asks again.

When every source is ready, a dispatch arbiter sends one complete instruction per cycle to
the SIMD unit (`disp`). At dispatch, the dead-operand bits clear liveness. The SIMD unit
returns the result with its cache bank and row (`wb`). The result is written into the cache,
marks its register live, and completes the instruction.

The SIMD unit, the instruction supply and the memory system are outside this RTL. Their
signals are top-level ports.

`events` pulses one flag per cycle for each mechanism:

* activation, deactivation;
* prefetch, fill, writeback;
* main-bank wait, fill-arbiter conflict, crossbar wait;
* cache bank conflict, issue stall.

## Where this design departs from, or adds to, the description it follows

* **Main-bank latency** is one number (7 cycles). The dense cells are modelled as an array
  plus a counter. No cell circuit is given.
* **Crossbar topology.** The main-side crossbar is a plain 16x16 crossbar with per-port
  round-robin. A flattened butterfly would only matter for much wider bank counts.
* **Interval boundaries.** The finished interval's live registers are written back before
  the next interval is loaded. A register shared by consecutive intervals is therefore
  moved twice. The description does not say how such sharing is handled.
* **Scheduling simplifications.** One instruction per warp is in flight. At most one
  activation and one offset release happen per cycle. The destination lookup takes a second
  issue cycle for every instruction that writes a register.
* **Interfaces.** Handshakes, port counts of the cache banks, reset behaviour and all
  arbitration policies are this design's own. Each module's opening comment says which
  choices are its own.
* **Out of scope.**
  * The compiler passes.
  * Instruction encoding of the prefetch vector.
  * The 32-register-interval and 16-active-warp variants. These need a wider cache: one
    register per bank per warp caps an interval at 16 registers.

## Verification

Each block has a self-checking testbench in `tb/` that compares it against an independent
model. Each prints `TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_rr_arbiter` | winner and pointer update against a pointer model; fairness |
| `tb_addr_alloc_unit` | both queues against queue models, including out-of-order release |
| `tb_warp_control_block` | table, valid, offset, working-set and liveness behaviour |
| `tb_main_rf_bank` | data and exact transfer time (LAT + 4 + stalls); busy window |
| `tb_main_xbar` | four-beat ownership, slice order, data routing, no starvation |
| `tb_rfc_bank` | read latency, slice writes, combinational slice read |
| `tb_rfc_operand_arbiter` | one grant per bank, data one cycle later, no starvation |
| `tb_operand_collector` | requests, dispatch condition, dispatched fields and values |
| `tb_warp_prefetch_unit` | exactly the live registers move; distinct banks; no busy-bank request |
| `tb_two_level_scheduler` | issue eligibility, offset uniqueness, at most 8 active, completion |
| `tb_ltrf_top` | whole design at full default size, end to end |
| `tb_ltrf_active4` | the same workload with a 4-warp active pool |
| `tb_ltrf_no_liveness` | the same workload with liveness tracking off (every set member moves) |

`tb_ltrf_top` instantiates `ltrf_top` with no parameter overrides. It runs 64 warps through
generated three-interval programs. Each program has a long-latency operation in the middle
interval and dead-operand bits from a backward liveness pass. It checks every dispatched
source value against a reference register file, which means values survive writeback,
deactivation and refetch. It also requires every counted mechanism to occur at least once. A
run takes about 4000 cycles and under a second of simulation after a one-minute build.

On one generated program set, the default configuration finished in 3963 cycles with 585
fills and 836 writebacks. With liveness tracking off, the same programs took 7671 cycles with
2369 fills and 2369 writebacks. Dead registers, which the default neither writes back nor
reads in, account for most of the main register file traffic in these programs. The numbers
come from synthetic programs, not real kernels.

To run one with plain Verilator:

```
verilator --binary --timing -Wno-fatal --top-module tb_ltrf_top \
    -y rtl -Irtl rtl/ltrf_pkg.sv tb/tb_ltrf_top.sv -o sim && ./obj_dir/sim
```

Assertions in the RTL cover:

* handshake rules;
* one owner per crossbar port;
* no same-row write collision in a cache bank;
* a source being valid in the cache at issue;
* a granted main bank being ready.

## Files

`rtl/ltrf_pkg.sv` holds the shared constants, types and the main-file address mapping. The
other `rtl/` files hold one module each:

* `rr_arbiter`, `addr_alloc_unit`, `warp_control_block`, `warp_prefetch_unit`;
* `main_rf_bank`, `main_xbar`;
* `rfc_bank`, `rfc_operand_arbiter`, `operand_collector`;
* `two_level_scheduler`;
* the top, `ltrf_top`.

The yosys synthesis of the full top is slow: two megabytes of main register file held as
flip-flop arrays. It is meant to be mapped to memory macros.
