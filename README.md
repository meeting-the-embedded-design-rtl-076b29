# A Cortex-M3 style memory, interrupt and debug-patch subsystem

Small 32-bit controllers for cars (window lifts, seat control, sensor monitoring) compete
with 8- and 16-bit parts on cost, and they spend much of their time in interrupts and in
single-bit updates of I/O state. The subsystem here holds the hardware that a Cortex-M3
class core puts around its pipeline to serve those needs cheaply:

* an **interrupt controller** that saves and restores the interrupted context in hardware,
  nests interrupts by priority, and runs back-to-back interrupts without restoring and
  re-saving the context in between (*tail-chaining*);
* a **bit-band unit** that gives every bit of a 1 MB SRAM or peripheral window its own byte
  address, so a semaphore bit is set or cleared by one store, atomically;
* a **memory protection unit** with 32-byte region granularity, fine enough to give each
  task its own code, data and stack regions;
* a **flash patch unit** that lets a debugger replace up to eight flash words at run time;
* a **prefetching flash interface** that reads slow embedded flash a wide line at a time;
* an **SRAM and peripheral interface**, and a **bus matrix** joining it all.

The processor core itself, the single-wire debug port and the flash array are not part of
this RTL. They connect through the ports of the top module `cm3_top`, and the testbenches
supply behavioural models for them.

## Block diagram and data paths

```
                 core fetch ──► MPU ─────────────────────────┐
                 core data  ──► MPU ──► bit-band ──────────┐ │
                 debug port ─────────────────────────────┐ │ │
                                                         ▼ ▼ ▼
                                                   bus matrix (3 x 4)
                     ┌───────────────┬──────────────────┼─────────────────────┐
                     ▼               ▼                  ▼                     ▼
              flash patch      SRAM (64 KB)     peripheral/external   private peripheral bus:
                     ▼                          (ext_periph_* ports)   flash patch, NVIC, MPU regs
              flash interface ◄──► flash array (flash_* ports)
   irq[31:0] ──► NVIC ──► core_stall, handler_start, exc_num   ◄── exc_return
```

All transfers use one request/response pair (`cm3_pkg::bus_req_t`, `bus_rsp_t`). A master
raises `valid` with address, direction, size (byte/half/word), write data and `lock`, and
holds all of it until the cycle in which the slave raises `ready`; `rdata` and `err` belong
to that cycle. A slave that can answer at once does so in the request's own cycle. `lock`
keeps the slave for the master's next request.

## Memory map

| Region | Base | Size | Slave |
|---|---|---|---|
| Code (flash) | 0x0000_0000 | 0.5 GB | flash patch, then flash interface |
| SRAM | 0x2000_0000 | 0.5 GB | SRAM (64 KB populated; err above) |
| Peripheral | 0x4000_0000 | 0.5 GB | `ext_periph_*` |
| External RAM / device | 0x6000_0000 / 0xA000_0000 | 1 GB each | `ext_periph_*` |
| Private peripheral bus | 0xE000_0000 | | register blocks below; err elsewhere |

Bit-band windows: region 0x2000_0000–0x200F_FFFF aliased at 0x2080_0000–0x20FF_FFFF, and
region 0x4000_0000–0x400F_FFFF aliased at 0x4080_0000–0x40FF_FFFF (1 MB region, 7 MB gap,
8 MB alias).

Register blocks (32-bit accesses, answered in the same cycle):

| Block | Address | Registers |
|---|---|---|
| Flash patch | 0xE000_2000 | +0x00 CTRL[0]=enable; +0x08+4n COMP[n] = word address[31:2], bit 0 enable; +0x40+4n DATA[n] patch word |
| NVIC | 0xE000_E000 | +0x100 ISER, +0x180 ICER, +0x200 ISPR, +0x280 ICPR (write 1 to set/clear), +0x300 IABR active (read), +0x400+4k IPR, one byte per line, priority in bits 7:5 |
| MPU | 0xE000_ED00 | +0x00 CTRL[0]=enable; +0x10+8n RBAR[n] base[31:5]; +0x14+8n RLAR[n] limit[31:5], bit 0 enable, 1 read, 2 write, 3 execute, 4 unprivileged allowed |

## The exception sequencer (`nvic`)

This block is where most of the design's timing lives. Each line has an enable, a pending
and an active bit and a 3-bit priority; a lower number is more urgent, and ties go to the
lower line number. A rising edge on `irq[i]` sets its pending bit, and so does a write to
ISPR. The sequencer has five states:

| From | Condition | To | Length |
|---|---|---|---|
| THREAD | an enabled interrupt is pending | PUSH | 16 cycles |
| HANDLER | a pending interrupt is *more urgent* than the running one | PUSH (nested) | 16 cycles |
| HANDLER | `exc_return`, and a pending interrupt beats the level being returned to | TAIL | 6 cycles |
| HANDLER | `exc_return`, nothing qualifies | POP | 12 cycles |
| PUSH, TAIL | counter done | HANDLER | |
| POP | counter done | HANDLER if something is still active, else THREAD | |

The interrupt taken leaves pending and becomes active when PUSH or TAIL begins.
`core_stall` is high throughout PUSH, TAIL and POP. `handler_start` pulses in the last
cycle of PUSH or TAIL, and the core then starts the handler for `exc_num`. The running
interrupt is always the most urgent active one, because only a strictly more urgent
interrupt can preempt. This is why no explicit nesting stack is needed. On return, the
level being returned to is the most urgent of the *other* active interrupts, or thread
level if none is active.

For two interrupts raised together, this gives 16 + handler 1 + 6 + handler 2 + 12 cycles.
More generally, a burst of *n* interrupts raised together costs one 16-cycle entry,
*n*−1 six-cycle chains and one 12-cycle exit. The handlers run in priority order. The
testbench checks this against random bursts of up to eight lines with random priorities.
A software pre- and postamble would instead cost 26 + 16 cycles around *each* handler.
The 16/6/12 figures are parameters (`PUSH_CYCLES`, `TAIL_CYCLES`, `POP_CYCLES`). The block
only *times* the save and restore: the register values belong to the core. During the 16
entry cycles the core is expected to write its eight-word stack frame to SRAM through the
data master and to fetch the handler vector from flash through the fetch master. Because
the bus matrix arbitrates each slave separately, the two happen in parallel. With the
two-cycle SRAM of this design, eight stack writes fill exactly 16 cycles.

Not modelled: a more urgent interrupt arriving during entry (late arrival) or during
exit, the fixed system exceptions of a real core (reset, NMI, faults, SysTick), and
priority grouping.

## Bit banding (`bitband`)

An alias address `A` in a window maps to byte `region + A[22:3]` and bit `A[2:0]`:

* **Alias read:** one byte read of the region. The bit comes back as 0 or 1 in every byte lane.
* **Alias write:** bit 0 of the byte lane addressed by `A` is the new value. The unit reads
  the byte with `lock` raised, then writes it back with the bit changed. The bus matrix
  gives the slave to no other master between the two transfers, so the update is atomic
  for every master in the system, not only for interrupts on the same core.
* **Cost:** an alias write takes two slave transfers (four cycles on the SRAM). An access
  outside the windows passes through without an added cycle.

## Memory protection (`mpu`)

Eight regions, each with a base and a limit at 32-byte granularity. An address is inside
when `base[31:5] <= addr[31:5] <= limit[31:5]`. Where regions overlap, the highest-numbered
region decides. An address that no region covers is open to privileged code only. Each
region has read, write, execute and unprivileged-allowed bits. A fetch is checked for
execute; a data access is checked for read or write.

A refused access never reaches the bus. The unit answers it itself with `err` in the same
cycle and pulses `mpu_fetch_fault` or `mpu_data_fault`. Privileged accesses to the private
peripheral bus are never checked, so the MPU registers stay reachable. After reset the unit
is disabled and passes everything.

A base/limit pair is used rather than power-of-two sizes. This lets a 32-byte task stack or
a 96-byte data block take one region each.

## Flash path (`flash_patch`, `flash_interface`)

**Flash patch.** A read of the code region whose word address matches an enabled comparator
is answered in its own cycle with the patch word and never reaches the flash. This applies
to instruction fetches and to data reads (constants). Writes always pass through. A
breakpoint is set by patching a breakpoint instruction into the word.

**Flash interface.** The interface reads 64-bit lines (four 16-bit instructions) and keeps
two line buffers:

* **Hit:** a read that hits a buffer is answered at once.
* **Prefetch:** after each read, if the next sequential line is in neither buffer and the
  flash is idle, that line is fetched into the buffer not holding the current line.
* **Miss:** a read elsewhere in the flash, such as a literal-pool load, waits for any read
  in flight and then replaces the least recently used buffer. This breaks the sequential
  stream.
* **Cost:** a cold miss costs the flash access time plus two cycles.

The flash array answers through `flash_req`/`flash_addr` (line index) and
`flash_ready`/`flash_rdata`. Any number of wait states is allowed; the testbenches use
three. Flash programming is not part of this design, and writes to the code region get
`err`.

## Bus matrix (`bus_matrix`)

The matrix has three masters (0 fetch, 1 data after bit-banding, 2 debug) and four slaves
(code, SRAM, peripheral/external, private peripheral bus).

* **Arbitration:** each slave has its own arbiter. An idle slave serves the requesting
  master with the highest priority (data, then fetch, then debug) in the same cycle.
* **Holding:** once a transfer has begun, the slave stays with its master until `ready`.
* **Lock:** a master that raises `lock` also keeps the slave for its next request, as long
  as that request goes to the same slave.

The matrix adds no cycles of its own.

## How far to trust it, and where it departs from the source description

The architectural description this RTL follows gives names and functions, plus a few hard
numbers:

* 16/6/12-cycle interrupt entry, tail-chain and exit;
* a 1 MB bit-band region aliased to 8 MB, with one byte per bit;
* 32-byte protection granularity;
* eight patchable flash words;
* wider-than-16-bit flash fetches;
* the region sizes of the memory map.

The following are this design's own choices:

* all register layouts and addresses;
* 32 interrupt lines with 3-bit priorities;
* 8 protection regions and their base/limit form;
* 64 KB of SRAM with a two-cycle access;
* 64-bit flash lines and the two-buffer prefetch rule;
* the bus protocol and the master priorities;
* the bit order within a bit-band byte.

These choices are marked in each file's opening comment. Register layouts differ from any
real product, so software written for a real Cortex-M3 will not run against these
registers unchanged.

Placement differs from the reference block diagram in two places:

* **Flash patch.** The diagram draws it beside the data watchpoints, between the protection
  unit and the bus matrix. Here it sits on the code-region side of the matrix, so every
  master sees the patched words, including the debugger.
* **Bit-band unit.** The diagram does not show it. Here it is placed on the data path,
  after the protection unit, so protection is checked on the alias address.

Not included: the processor core and its Thumb-2 instruction set, the single-wire debug
protocol, trace (ETM, single-wire viewer), data watchpoints, the flash array itself, and
the cache/TCM error-handling features of the larger ARM1156T2F-S class core.

Every block has a self-checking testbench. Each is also run against a deliberately broken
copy of its block, and each catches the break. The end-to-end test (`tb_cm3_top`) runs
the top at its default parameters and reproduces these results:

* the P16 T6 O12 stall sequence for two interrupts raised together;
* P16 P16 O12 O12 for a nested preemption;
* stacking overlapped with the vector fetch;
* bit-band set, clear and read in SRAM and in the peripheral space;
* the protection faults;
* patched code and constants;
* literal-pool misses and prefetch hits.

It also counts each mechanism and fails if any never occurred.

A second whole-system test, `tb_task_isolation`, lays out twelve memory areas back to back
at 32-byte multiples: vectors, RTOS code and data, code, data and stack for two tasks, a
shared library, global data and system data. For each task in turn, it programs the five
regions that task needs and runs the task unprivileged. It then checks the first and last
word of every area: only the task's own areas, the shared library and global data are
reachable, with no guard gaps between areas.

## Files and simulation

`rtl/` contains:

| File | Contents |
|---|---|
| `cm3_pkg.sv` | Shared types, memory map and helper functions |
| `nvic.sv`, `mpu.sv`, `bitband.sv` | Interrupt controller, protection unit, bit-band unit |
| `flash_patch.sv`, `flash_interface.sv` | Flash path |
| `sram_periph_if.sv`, `bus_matrix.sv` | SRAM and peripheral interface, interconnect |
| `cm3_top.sv` | Top module |

`tb/` contains:

* one testbench per block, `tb_<block>.sv`, plus `tb_cm3_top.sv` and `tb_task_isolation.sv`;
* `tb_bus_mem.sv`, a memory slave model;
* `tb_flash_model.sv`, a flash array model in which word *w* holds `w*0x9E3779B1 ^ 0x12345678`.

Each testbench prints `TB_RESULT checks=N failures=M` and finishes. To run one with
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/cm3_pkg.sv tb/tb_cm3_top.sv --top-module tb_cm3_top -o sim && ./obj_dir/sim
```

Replace `tb_cm3_top` with `tb_nvic`, `tb_mpu`, `tb_bitband`, `tb_flash_patch`,
`tb_flash_interface`, `tb_sram_periph_if` or `tb_bus_matrix` to test one block. The
simulator is two-state, so every block resets or initialises all state it reads. The SRAM
array is the exception: it has no reset, like a real RAM.
