# Synchronous performance monitor for a five-stage RISC-V on-board computer

## Design idea

Most performance monitors count an event where and when it happens. The
count then belongs to no particular instruction. Events of squashed
instructions are counted, two events of one instruction land in different
cycles, and an overflow interrupt names a PC that has nothing to do with the
event.

This design does not count an event where it is detected. Every pipeline
stage writes the events it detects into a **triggered-events vector**. The
vector is a small register field that travels beside the instruction in
each inter-stage register (RIFID, RIDEX, REXMEM, RMEMWB). A later stage can
still change the vector of its own instruction; for example, decode clears
the presumed retirement of an instruction that turns into an exception. The
counters see the vector only on the clock edge where the instruction leaves
write-back. So every increment is tied to exactly one completed (or
cancelled) instruction, at the moment that instruction finishes.

The events path runs in parallel with the pipeline registers. It only
copies bits from one register to the next, so it adds no logic in series
with the datapath.

The processor is an in-order RV32I + Zicsr core with machine and user modes.
It is built into a small on-board computer with on-chip memory and a
real-time timer.

## Hierarchy

```
obc_top                 on-board computer: core + memory + timer, data-bus decoder
├── rv32_core           pipeline wiring, stall / cancel / drain control, write-back
│   ├── if_stage        PC, fetch request, one-word fetch buffer
│   ├── stage_reg ×4    RIFID, RIDEX, REXMEM, RMEMWB (payload + valid + events)
│   ├── id_stage        control unit, hazard unit, exception / interrupt detection
│   ├── gpr             32×32 register file, written on the falling edge
│   ├── ex_stage        ALU, branch decision, jump target
│   │   └── fwd_unit    forwarding from REXMEM and RMEMWB
│   ├── mem_stage       loads and stores with wait states
│   └── csr_unit        CSRs, atomic access, traps, privilege, interrupts
│       └── hpm_unit    counters and their configuration registers
├── main_mem            64 KiB on-chip memory (instruction and data ports)
└── rt_timer            mtime / mtimecmp, timer interrupt
```

Shared types are in `rtl/hpm_pkg.sv`: the payload structs, the event bit
positions, CSR addresses and trap causes.

## The triggered-events vector

The vector has 14 bits. Bit *k* is counted by the counter whose
`mhpmevent` register holds *k*. After reset, `mhpmevent`*n* = *n*, so the
counters read as follows:

| bit | counter        | event                | set in | rule |
|----:|----------------|----------------------|--------|------|
| 0   | mcycle         | cycle                | —      | every non-inhibited rising edge |
| 1   | (time)         | —                    | —      | never set; `time` reads the real-time timer |
| 2   | minstret       | retired instruction  | IF     | presumed at fetch; cleared for traps and cancelled slots |
| 3   | mhpmcounter3   | exception            | ID     | illegal instruction, ECALL, EBREAK, refused CSR access |
| 4   | mhpmcounter4   | external interrupt   | ID     | interrupt attached to the instruction in decode |
| 5   | mhpmcounter5   | timer interrupt      | ID     | same |
| 6   | mhpmcounter6   | taken branch         | EX     | |
| 7   | mhpmcounter7   | not-taken branch     | EX     | |
| 8   | mhpmcounter8   | unconditional jump   | EX     | JAL, JALR |
| 9   | mhpmcounter9   | hazard               | ID     | carried by the bubble the hazard unit inserts |
| 10  | mhpmcounter10  | memory access        | MEM    | any load or store |
| 11  | mhpmcounter11  | load                 | MEM    | |
| 12  | mhpmcounter12  | store                | MEM    | |
| 13  | mhpmcounter13  | fetch                | IF     | kept even if the slot is cancelled |

Rules for slots that do not complete:

* **Cancelled by a taken branch or jump.** A slot cancelled in IF/ID or
  ID/EX keeps the events it had when it entered the cancelled stage. It
  loses only its presumed retirement. Its fetch was real, so it is still
  counted.
* **Trap.** The trapping slot travels to write-back as a no-operation. It
  carries CYCLE, FETCH and its trap event, but not INSTRET.
* **Hazard bubble.** The bubble carries the HAZARD event. So a hazard is
  counted once, when its bubble leaves write-back.

## Counting unit (`hpm_unit`)

* **Counters.** `mcycle`, `minstret` and `mhpmcounter3..13` are 64-bit,
  reachable as low and high halves at `0xB00+n` and `0xB80+n`. They are
  also reachable through the user aliases `0xC00+n` and `0xC80+n`.
  `time`/`timeh` read the real-time timer. Counters 14..31 have no
  storage: they read as zero and ignore writes.
* **General configuration.**
  * `mcountinhibit` freezes each counter individually.
  * `mcounteren` makes counter *n* readable from user mode. A refused
    access raises an illegal-instruction exception.
* **Specific configuration.** `mhpmevent3..13` select the vector bit
  counted by each programmable counter.
* **COUNT process.** On every rising edge where the pipeline advances, each
  non-inhibited counter adds 1 if its selected bit is set in the vector
  leaving write-back. `mcycle` adds 1 on every non-inhibited edge, stalled
  or not. The vector counted last is visible as `count_ev`, the "COUNT
  stage" value.
* **Write and increment on the same edge.** A counter written on an edge
  takes the written value. The increment of that edge is dropped, which is
  the stated behaviour: the event is lost.

## Atomic CSR access (`csr_unit`)

A CSR instruction reads and writes its CSR within its write-back cycle:

1. **Rising edge entering WB.** The old CSR value is latched at the output
   of the CSR unit.
2. **Falling edge in the middle of WB.** rd receives the latched old value
   (the register file writes on the falling edge). The new value goes into
   a shadow register.
3. **Next rising edge.** The shadow value is written into the CSR, on the
   same edge as the counter increments.

A CSR instruction that follows immediately latches its read on the same
edge as step 3. It therefore reads the shadow value, so back-to-back CSR
instructions see each other's writes.

Example: `csrrw t2, mcycle, t1` with t1 = 0 entering WB when `mcycle` is 80
leaves t2 = 80 and then `mcycle` = 0.

The CSR unit also holds:

* `mstatus` (MIE, MPIE, MPP);
* `misa`, `mie`, `mip`, `mhartid`;
* `mtvec` (direct mode);
* `mscratch`, `mepc`, `mcause`, `mtval`.

It also tracks the privilege mode and applies trap entry and MRET on the
rising edge that ends the write-back cycle of the trapping slot or MRET.

## Pipeline control

* **Global stall.** While a fetch or a load/store waits for memory, every
  stage holds. Fetches are held off while a load/store is on the bus. So
  memory wait cycles add up, as in the execution model below.
* **Forwarding.** `fwd_unit` gives EX the newest value from REXMEM, then
  from RMEMWB. Loaded data is not forwarded from the end of MEM.
* **Hazards.** The hazard unit inserts one bubble (one HAZARD event) in
  these cases:
  * **Load-use:** a source register is the rd of a load in EX.
  * **CSR result:** a source register is the rd of a CSR instruction in EX
    or MEM. Its value exists only halfway through its write-back.
  * **CSR source:** a CSR instruction's rs1 is written by an instruction in
    EX or MEM. The CSR operand is taken from the register file, to keep the
    CSR access atomic.
* **Branches and jumps.** These are resolved in EX. The two younger slots
  are cancelled: 2 cycles and 2 extra fetches per taken branch or jump.
* **Traps and MRET.** These are detected in decode. Decode cancels the slot
  behind them and stops fetching until they leave write-back. Fetch then
  restarts at `mtvec` or `mepc`. So the pipeline is always empty behind a
  trap, and the handler sees consistent CSRs. Interrupts are taken on the
  instruction in decode, never while the pipeline is being emptied.

## Memory and timer

* **`main_mem`.** 16384 words (64 KiB), with separate instruction and data
  request/acknowledge ports. Wait states: 1 per fetch, 2 per load, 1 per
  store. So a store takes 2 cycles in MEM, a load 3, and a fetch 2.
* **`rt_timer`.** At data address `0x2000_0000`:
  * `mtime` low/high at +0/+4: counts every cycle and cannot be inhibited;
  * `mtimecmp` low/high at +8/+C.
  * The timer interrupt is raised while `mtime >= mtimecmp`.
* **External interrupt.** The line is the top-level port `ext_irq`.

## Execution model

Cycles measured on this design follow the published execution model:

```
cycles = retired + (fetches + 4) + hazards + 2·(taken branches + jumps)
       + 2·loads + stores + 4 + 8·traps
```

Here `fetches` is the value of the fetch counter. It counts every slot that
was fetched: completed instructions, the two slots cancelled by each taken
branch or jump, the trapping slot itself, and the one slot cancelled when a
trap or MRET starts emptying the pipeline.

* The formula is exact for trap-free code. There it reduces to
  `2·retired + 4·(taken branches + jumps) + hazards + 2·loads + stores + 8`.
  `tb_rv32_core` and `tb_quicksort` check this form.
* Trap entry and MRET each take 4 cycles plus one cancelled fetch, as the
  published model says.
* A trap found in decode while the fetch behind it is still outstanding
  waits one more cycle for that fetch. The fetched slot is then cancelled.
  * In `tb_exception_test`, an ECALL loop, every trap pays this cycle: 9
    per trap.
  * The mixed program of `tb_obc_top` (three exceptions, two interrupts)
    totals exactly 8 per trap.
  * So the cost of one trap is 8 or 9 cycles, depending on the state of
    fetch when the trap is taken.
* The constant 4 inside the brackets is a difference from the published
  numbers; see *Differences*.

## Parameters

| module | parameter | default | origin |
|---|---|---|---|
| hpm_unit, csr_unit, rv32_core, obc_top | `NUM_HPM` | 11 | programmable counters 3..13 of the event table |
| hpm_unit | `CNT_W` | 64 | RISC-V counter width |
| main_mem, obc_top | `MEM_WORDS` | 16384 | own choice |
| main_mem, obc_top | `FETCH_WAIT` / `LOAD_WAIT` / `STORE_WAIT` | 1 / 2 / 1 | execution model |
| obc_top | `TIMER_BASE` | `0x2000_0000` | own choice |
| if_stage, rv32_core, obc_top | `RESET_PC` | 0 | own choice |
| csr_unit, rv32_core, obc_top | `MTVEC_RESET` | `0x100` | own choice |
| gpr | `XLEN`, `NREGS` | 32, 32 | RV32I |

## Verification

Each module has a self-checking testbench `tb/tb_<module>.sv`. Each one:

* draws its random stimulus with `$urandom`;
* has a watchdog;
* ends with a `TB_RESULT checks=… failures=…` line.

Highlights:

* **`tb_hpm_unit`.** A reference model of the counters under random events,
  writes, inhibits and event selections. It covers the write-beats-increment
  rule.
* **`tb_csr_unit`.** The three-step atomic access, the `mcycle` 80 → 0
  example, back-to-back CSR instructions, traps, privilege and legality.
* **`tb_rv32_core`.** Bubble sort plus a subroutine-based checksum. The
  counters are checked against a trace of the completed instructions, and
  the cycle count against the execution model.
* **`tb_obc_top`.** The full computer at default parameters. It exercises:
  * load-use and CSR hazards;
  * branches and jumps;
  * three exception kinds;
  * an external and a timer interrupt;
  * the trap handler adjusting `mepc`;
  * a user-mode counter read refused by `mcounteren`;
  * counter writes;
  * `mcountinhibit`.

  Every counter is compared with a cycle-level reference model. The bench
  also checks that the pipeline is empty whenever a trap or MRET reaches
  write-back.
* **`tb_exception_test`.** An ECALL about every 200 instructions, 14
  times, with a handler that advances `mepc`. It checks that trapping
  instructions are never counted as retired. It also checks the exception
  count and the cycle cost of each trap.
* **`tb_quicksort`.** A recursive quicksort of 64 random words on the full
  computer. It prints the event table and checks the cycle count against
  the execution model (for example, 13856 cycles, 3895 retired).

To run a bench with Verilator:

```
verilator --binary --timing -y rtl -y tb rtl/hpm_pkg.sv tb/rv_asm_pkg.sv \
          tb/tb_obc_top.sv --top-module tb_obc_top
./obj_dir/Vtb_obc_top            # +trace prints the retirement trace
```

`tb/rv_asm_pkg.sv` is a small RV32I assembler and reference decoder used by
the processor-level benches.

## Differences from the published design

* **Fetch count.** The published measurements satisfy
  fetches = retired + 2·(branches + jumps) + 4. Here the fetch counter has
  no +4: a slot is counted only when it leaves write-back, so the start-up
  term does not appear. The cycle model holds exactly when the 4 is added
  back.
* **Trap cost.** The published model charges 8 cycles per trap. Here a
  trap costs 8 or 9 cycles (see *Execution model*). The extra cycle is
  spent waiting in decode for an outstanding fetch that is then discarded.
* **MRET directly followed by a trap.** The published model makes this
  case one cycle cheaper (7 instead of 8). This design has no such saving.
  `tb_exception_test` measures the same cost for it as for any other trap.
* **Event string width.** The published pipeline example prints 13 event
  digits, while the event table lists 14 slots including `time`. Here the
  vector has 14 bits, with bit 1 unused.
* **Number of counters.** The CSR map allows `mhpmcounter3..31`. Only
  3..13, the ones with assigned events, are built.
* **Memory.** The published system runs from external DDR through a vendor
  memory controller, or from on-chip memory of unstated size. Here memory is
  on-chip, 64 KiB, with the model's latencies.
* **Details not given in the published design, and chosen here:**
  * interrupts taken in decode;
  * the exact stall rules for CSR hazards;
  * no forwarding of load data from MEM;
  * the global stall;
  * the set of machine CSRs;
  * the `mhpmevent` encoding (bit index);
  * the timer's register map;
  * reset values.
* **Not built:**
  * the platform interrupt controller and its selector (only named in the
    published utilization table; the external interrupt is a port here);
  * the boot PROM (its contents are not given);
  * the DDR memory controller (vendor IP).
* **Not implemented from the RISC-V specification:** overflow interrupts
  (Sscofpmf), privilege-mode event filtering, misaligned-access exceptions,
  and caches (absent in the published design too).
