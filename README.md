# A hardware functional-first simulator for virtualized RISC-V systems

The simulator measures the timing of a program that runs on a virtualized system: a user
program on a guest operating system on a hypervisor. Its main idea is that the timing model
does not stop at the user/kernel boundary. When the program makes a system call, the guest OS
code and the hypervisor code that serve it run through the same timed pipeline as the user
code. Mode switches, context saves and hypercalls therefore show up in the cycle count, the
miss counts and the instruction count. The same design, with one parameter flipped, models
the non-virtualized system, so the cost of virtualization can be read off directly.

The simulator is split the usual way for fast simulators:

* A **functional simulator** (`func_sim`) executes RV32I + Zicsr instructions one at a time.
  It has enough of the hypervisor extension to trap system calls and hypercalls and to
  return from them.
* A **timing simulator** (`timing_sim`) models a five-stage, scalar, in-order pipeline with
  TLBs and caches.

The timing simulator drives: whenever its fetch stage is empty, it asks for "one more
instruction". The functional simulator answers with a compact *trace record* of that
instruction. The functional side is therefore always on the correct path. The timing side
only decides *how long* things take.

Everything here is synthesizable SystemVerilog (IEEE 1800-2017) and runs in Verilator.

## Module map

```
hvsim_top                    functional simulator + timing simulator
├── func_sim                 fetch / execute / trace, one instruction per request
│   ├── vmem                 virtual memory image, four portions (one per privilege level)
│   ├── regfile              x0..x31
│   └── csr_file             CSRs, virtualization mode V, privilege; traps and returns
└── timing_sim               5-stage pipeline model, clock cycle counter, statistics
    ├── hazard_unit          stalls, D-cache arbitration, flushes, next-instruction request
    └── miss_detect          I-TLB, I-cache, D-TLB, D-cache, shadow page walk, stage times
        ├── dm_tlb  (x2)     direct-mapped TLB, 16 entries
        ├── dm_cache (x2)    direct-mapped tag store, 4096 one-word blocks
        └── miss_counter     the nine miss categories and four totals
```

`hvsim_pkg` holds the shared types: `trace_t`, `stage_t`, `miss_counts_t`, `pipe_stats_t`,
the CSR numbers and the address-translation function.

## The trace record

One 89-bit packed struct (`trace_t`) crosses from the functional side to the timing side per
instruction. It comes together with a 32-bit instruction number.

| bits  | field | notes |
|-------|-------|-------|
| 0     | process id | always 0 (one process) |
| 1     | OS id | always 0 (one guest) |
| 33:2  | pc | |
| 34    | load | |
| 35    | store | |
| 67:36 | data virtual address | for loads and stores |
| 72:68 | rs1 | 0 if the instruction reads no rs1 |
| 77:73 | rs2 | 0 if the instruction reads no rs2 |
| 82:78 | rd  | 0 if the instruction writes no register |
| 83    | conditional branch | |
| 84    | taken / redirect | taken branch, JAL, JALR, trapping ECALL, SRET, MRET |
| 85    | V | virtualization mode while the instruction ran |
| 87:86 | privilege | U=0, S=1, M=3 |
| 88    | exit system call | makes the timing side drain and stop |

Register fields are zeroed when they are not used. The hazard logic can then treat register 0
as "no dependence" without decoding the instruction again.

The handshake has three steps:

1. `timing_sim.emulate` pulses for one cycle.
2. Two or three cycles later, `func_sim.trace_valid` pulses with `inst_num` and `trace`.
3. The record enters the fetch stage.

## Functional side: privilege levels, traps and the console

`func_sim` is a small multi-cycle machine: IDLE → FETCH → EXEC (→ LOAD) → IDLE. Each request
makes it do the following:

* read the instruction word at `pc`;
* execute it, updating `regfile`, `vmem` and `csr_file`;
* emit the trace record;
* bump the instruction counter.

FENCE and EBREAK only advance the pc. Unknown encodings also only advance the pc; there is no
illegal-instruction trap.

**Memory image.** `vmem` gives each privilege level its own quarter of the 32-bit address
space:

| portion | virtual addresses | contents |
|---|---|---|
| U / VU | 0x0000_0000 – 0x3FFF_FFFF | user program |
| VS | 0x4000_0000 – 0x7FFF_FFFF | guest OS |
| HS | 0x8000_0000 – 0xBFFF_FFFF | OS (non-virtualized) or hypervisor |
| M  | 0xC000_0000 – 0xFFFF_FFFF | machine level |

Storage is `2^REGION_AW` words per portion (default 24, i.e. 64 MiB). The image repeats
inside a portion every 64 MiB, so code at the bottom of a portion and a stack near its top
both fit as long as together they stay below 64 MiB.

Loading is done from outside, through the `ld_we/ld_addr/ld_data` port while reset is held.
The program's entry point goes on `e_entry`. There is no ELF parser in hardware.

**Reset state.** Reset puts the hart straight at the program entry point, as if the OS had
already booted:

* pc = `e_entry`
* privilege U
* V = `VIRTUALIZED`
* sp = 0x3FFF_FFF0
* all other registers 0

**Trap routing** (`csr_file`) is fixed rather than driven by `medeleg`/`hedeleg`. Those two are
only storage here. Traps are direct: the target is the whole `tvec` value. The `tvec`s reset
to the base of the handler's portion.

| ECALL from | goes to | state saved | V after |
|---|---|---|---|
| VU (V=1, U) | VS: `vstvec` | `vsepc`, `vscause`=8 | 1 |
| U (V=0)     | HS: `stvec` | `sepc`, `scause`=8 | 0 |
| VS          | HS: `stvec` | `sepc`, `scause`=10, `hstatus.SPV`=1 | 0 |
| HS or M     | M: `mtvec`  | `mepc`, `mcause`=9/11, MPP/MPV | 0 |

Returns work as follows:

* SRET in VS uses `vsepc`.
* SRET in HS uses `sepc` and restores V from `hstatus.SPV`.
* MRET restores MPP and MPV.

While V=1, accesses to supervisor CSRs (0x1xx) are redirected to their VS copies (0x2xx). The
same guest OS binary therefore runs in either system.

**Exit and console.** An ECALL from U/VU with a7 = 93 is the exit system call. It is not
trapped; it sets trace bit 88 and halts the functional side. A byte store to 0xBFFF_F000 (in
the HS portion) is the console port and appears on `out_valid/out_byte`. So a write system
call shows up on the console only once the OS or hypervisor copies the user buffer there.

## Timing side: a locked five-stage pipeline

Each of IF, ID, EX, MEM and WB holds one instruction in a `stage_t`: valid, the trace, the
instruction number, and `rem`, the number of cycles it still needs in that stage. ID, EX and
WB need 1 cycle (`ID_CYCLES`, `EX_CYCLES`, `WB_CYCLES`). IF and MEM get their time from the
miss detection unit at the moment they start:

```
IF  = 1 + [I-TLB miss] * (PTE read) + [I-cache miss] * ICACHE_MISS
MEM = 1                                                          no memory access
    = 1 + [D-TLB miss] * (PTE read) + [D-cache miss] * DC_DATA_MISS            load
    = 1 + [D-TLB miss] * (PTE read) + [D-cache miss] * DC_WR_MISS + MEM_WRITE  store
PTE read = DC_PTE_MISS if the page table entry misses in the D-cache, else PTE_HIT
```

The defaults are 100 cycles for each miss penalty, 100 for the main-memory write and 1 for a
PTE hit. Every store pays `MEM_WRITE` because the D-cache is write-through. It also allocates
on a write miss.

**Pipeline locking.** An instruction leaves a stage in its last cycle only if the next stage
is empty, or is being emptied in that same cycle. If it cannot leave, everything behind it
waits too. The advance signals are computed from WB backwards (`wb_adv → mem_adv → ex_ready →
id_leaving → if_adv`), so a whole chain of stages can move in one cycle.

**Frozen time.** While IF is empty and the request is outstanding, no simulated time passes:
`cycle_count` and all `rem` counters hold. The reported cycle count is therefore the same
however slow the functional side is. In every other host cycle, one host cycle is one
simulated cycle.

**End of run.** Once the exit record has been fetched, no more instructions are requested.
`done` rises when it has left WB. Every instruction leaving WB appears on
`ret_valid/ret_num/ret_trace` in program order.

## Hazards

The hazard detection unit (`hazard_unit`) is combinational. It sees the four stage registers
and decides the holds, the D-cache owner, the flush and the next request.

* **Forwarding.** All ALU and load results are forwarded. Each instruction that takes an
  operand from EX or MEM as it enters EX counts as one forward in `stats.forwards`.
* **Load-use.** An instruction in ID that reads the rd of a load in EX waits one cycle
  (`load_use_stalls`).
* **Branches resolve in ID.** Conditional branches and JALR need their operands in ID. They
  wait one cycle for an ALU result still in EX, and wait for a load until it has left MEM
  (`branch_stalls`, counted per stall cycle, so a load miss under a branch adds ~100).
* **Predict not taken.** A taken branch, JAL, JALR, trapping ECALL, SRET or MRET that leaves
  ID flushes IF (`flushes`). The functional side only supplies correct-path instructions, so
  the "flushed" instruction is really the right one. It restarts its fetch and pays a second
  IF time, usually 1 cycle because the I-cache now hits.
* **Structural hazard on the D-cache.** The page walk of an I-TLB miss reads its PTE through
  the D-cache, which MEM also uses (`struct_stalls`, per cycle).
  * If both want the D-cache in the same cycle, MEM wins.
  * A started user keeps the D-cache until its last cycle, so a 100-cycle PTE miss in IF
    holds back a load or store about to enter MEM.
  * The one-user rule is asserted in `miss_detect`.

Bypassing, load-use, branch-in-ID and predict-not-taken are the textbook five-stage rules.
The exact stall lengths and the choice of the D-cache as the contended resource belong to
this design.

## Address translation and the shadow page table

The TLBs and caches are tag-only models. Only hit or miss matters; the data lives in `vmem`.

* The TLBs are virtually indexed with direct mapping: index = VPN[3:0], tag = full VPN.
* The caches are physically indexed, with one-word blocks (16 KiB each): index = PA[13:2].

The translation from virtual to host physical addresses is fixed by the address ranges of the
system, and is the same for both configurations:

```
host PA = { ~VA[31:30], VA[29:0] }     U/VU -> 0xC..., VS -> 0x8..., HS -> 0x4..., M -> 0x0...
```

This is the mapping a shadow page table holds: guest virtual straight to host physical. On a
TLB miss, a hardware walker reads one 4-byte entry of that table at host physical
`PT_BASE + 4*VPN` (default `PT_BASE` = 0x0100_0000) through the D-cache, then refills the TLB.
The table's *contents* are not stored, because they are given by the formula above. Its
*accesses* are simulated, so they take D-cache space and can miss.

One consequence, visible in the tests: PTEs of pages that differ only in VPN[19:12] share a
D-cache block, since the block index is VPN[11:0]. They evict each other just as the pages
evict each other in the TLB.

## Statistics

`miss_counts` (`miss_counts_t`) holds the following counters:

* IF: I-TLB misses, I-cache misses, D-cache PTE misses.
* Loads: D-TLB misses, D-cache data misses, D-cache PTE misses.
* Stores: D-TLB misses, D-cache write misses, D-cache PTE misses.
* The four totals: I-TLB, I-cache, D-TLB, D-cache.

`stats` (`pipe_stats_t`) counts load-use stalls, branch stall cycles, structural stall cycles,
flushes, forwards and retired instructions. `cycle_count` is the simulated clock. CPI is
`cycle_count / stats.retired`.

## Software used by the tests

`tb/hv_programs_pkg.sv` builds all the software with a small assembler (`tb/rv_asm_pkg.sv`):

* **`search_user(n)`**: linear search of n words for a key. It prints the index, one byte,
  with a write system call (a7=64, a0=1, a1=buffer, a2=length), then exits.
* **`sort_user(n)`**: bubble sort of n words. It prints the sorted values as n bytes, then
  exits.
* **`write_handler`** at 0x8000_0000 (HS): the OS system-call handler, which in the
  virtualized system is the hypervisor's hypercall handler. It saves registers, copies the
  buffer to the console, restores registers, advances `sepc` and returns with SRET.
* **`guest_handler`** at 0x4000_0000 (VS): the paravirtualized guest OS. It saves registers,
  forwards the call as a hypercall (ECALL), restores, advances `vsepc` and returns with SRET.
  It is 12 instructions long.

A system call therefore goes U → HS → U in the non-virtualized system, and VU → VS → HS → VS
→ VU in the virtualized one. Results from the tests, at reduced memory depth but default
caches and penalties:

| workload | system | instructions | cycles |
|---|---|---|---|
| search, 128 words | non-virtualized | 777 | 17 775 |
| search, 128 words | virtualized | 789 | 19 289 |
| sort, 24 words | non-virtualized | 2 354 | 48 038 |
| sort, 24 words | virtualized | 2 366 | 49 552 |
| sort, 32 words, all defaults | virtualized | 4 048 | 79 166 |

The exact numbers depend on the random data. The difference between the two systems does not:

* exactly 12 instructions, one pass through the guest handler;
* about 1 500 cycles, from the extra guest code and page misses and a 301-cycle structural
  stall.

## Simulating

Every testbench is self-checking, ends with a `TB_RESULT checks=… failures=…` line and has a
watchdog. The packages must come first on the command line:

```sh
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/hvsim_pkg.sv tb/rv_asm_pkg.sv tb/hv_programs_pkg.sv \
    tb/tb_hvsim_top.sv --top-module tb_hvsim_top -Mdir obj_top
./obj_top/Vtb_hvsim_top
```

| testbench | what it runs |
|---|---|
| `tb_regfile`, `tb_vmem`, `tb_csr_file`, `tb_dm_tlb`, `tb_dm_cache`, `tb_miss_counter` | the leaf blocks against reference models, with random traffic |
| `tb_miss_detect` | hand-computed IF/MEM cycle counts for each miss combination |
| `tb_hazard_unit` | each hazard rule in isolation |
| `tb_timing_sim` | hand-built trace sequences. With zero penalties it checks N+4 cycles, load-use, branch stalls and flushes; with the default penalties it checks 205 cycles for a cold fetch, 506 for a cold store and 706 with a structural stall |
| `tb_func_sim` | a program that calls the guest, which calls the hypervisor, which prints; checks every trace field and mode switch |
| `tb_hvsim_top` | both workloads on both systems side by side. It checks console output, in-order retirement, counter sums and the 12-instruction difference, and requires every stall, flush, forward, mode switch and miss kind to occur at least once |
| `tb_hvsim_full` | the top with no parameter overrides: full caches and TLBs, 2^24 words per portion, virtualized sort of 32 words |

## What to change

* **System type.** `VIRTUALIZED` on `hvsim_top` selects the system type at reset.
* **Sizes and penalties.** The cache and TLB sizes, `MISS_PENALTY` and `MEM_WRITE` are
  top-level parameters. `PTE_HIT`, `PT_BASE` and the per-kind penalties are parameters of
  `timing_sim` and `miss_detect`.
* **Memory depth.** `REGION_AW` sets the depth per portion. 28 would be the whole 4 GiB
  address space. The default of 24 is what synthesis front ends elaborate comfortably: their
  memory use grows about 4x per two address bits (about 7 GB at 24).
* **Stage times.** Stage times above 1023 cycles would need a wider `rem` in `stage_t`.

## Where this design departs from, or adds to, the published description

* **Memory depth.** The memory holds 64 MiB per privilege portion instead of the full 1 GiB.
  Addresses alias within a portion.
* **Trap delegation.** Delegation is the fixed rule described above. The delegation CSRs exist
  but are ignored. There are no interrupts, no exceptions other than ECALL, and no PMP or
  permission checks.
* **Own choices.** The following were not specified and are this design's own:
  * exit call number 93 and console address 0xBFFF_F000;
  * reset `tvec` values and the reset stack pointer;
  * the shadow page table's base address and one-entry-per-VPN layout;
  * a PTE hit costs 1 cycle;
  * write-allocate on store misses;
  * how the IF and MEM times add up;
  * the D-cache as the structurally shared resource;
  * branch stall lengths;
  * frozen simulated time while waiting for the functional side;
  * the TLB index bits;
  * the handshake timing between the two halves.
* **Taken bit.** The trace marks ECALL, SRET and MRET as taken (they redirect the fetch), in
  addition to branches and jumps.
* **Not built.** The loader that places an ELF binary in memory is not part of the hardware:
  the image is written through the loader port.
* **Not reproduced.** The workloads' absolute instruction and cycle counts from the original
  evaluation are not reproduced. Those programs and their inputs are not available. The test
  programs here are of similar size and show the same effect: more instructions and cycles
  when virtualized.
