# On-Demand Redundancy Grouping for a six-core cluster

A cluster of small cores can be used in two very different ways. Six cores
working on separate data give the most throughput. Three cores running the
same program in lock-step, behind a majority voter, give one core that
survives a single-event upset. On-Demand Redundancy Grouping (ODRG) lets the
same hardware do either, chosen at run time: a six-core cluster runs either
as six independent cores ("performance" mode) or as two triple-redundant
cores ("soft-error tolerant" mode). When the voter sees one core disagree,
the group re-synchronises. The three cores save their state to memory through
the voter and load the voted copy back, so the faulty core is repaired and the
group goes on.

This repository is a SystemVerilog model of that scheme. It follows the ODRG
architecture published in "On-Demand Redundancy Grouping: Selectable
Soft-Error Tolerance for a Multicore Cluster" (Rogenmoser et al.) and puts a
minimal cluster around it. The ODRG unit is described in detail. The cluster
parts around it (interconnects, event unit, instruction cache) are only the
simplest logic that does their job. The cores are not included: the six core
interfaces are ports of the top module, and the testbenches drive them with a
transaction-level core model.

## The ODRG unit (`odrg_unit`)

One unit sits between three cores, A, B and C, and the three cluster
interfaces those cores would otherwise use ("I/O ports" A, B and C). Each
interface is a bundle:

* `core_out_t`: what a core drives, the instruction fetch request and the
  data request, 103 bits.
* `core_in_t`: what a core receives: fetch and data responses, an interrupt
  line, the hart id and the boot address.

The unit holds four things: input multiplexers, output multiplexers, a
voter, and a small control block (state machine plus registers).

| path | performance mode | soft-error tolerant mode (any TMR state) |
|---|---|---|
| core A input | I/O port A | I/O port A |
| core B / C input | its own I/O port | I/O port A (all three see the same inputs, hart id included) |
| I/O port A output | core A | bit-wise majority of A, B, C |
| I/O port B / C output | core B / C | all zeros (the port is idle) |
| mismatch counting | off | on |

The datapath has no registers in it, so voting adds no cycle of latency.
Ports B and C output constant zeros in the grouped mode, so whatever sits
behind them (demux, event-unit port, instruction-cache port) stays idle.

### Voter and detectors (`odrg_voter`)

Each output bit is the 2-of-3 majority of the three cores' bits. Three
detectors compare each core's whole bundle with the voted bundle. Detector
*i* is high in every cycle in which core *i* differs in at least one bit. All
bits are compared, including the address and data fields while `req` is low.
Lock-stepped cores drive identical values there anyway. A mismatch
increments that core's counter, so software can tell a one-off upset from a
core that fails again and again.

### Re-synchronisation

A mismatch only shows that the cores' internal states have drifted apart.
The voter has already corrected the value on the bus, but the faulty core
still holds bad state. Recovery is a cooperation between the unit and a
software routine that all three cores run in lock-step. The soft-error
tolerant mode therefore has three states (`odrg_fsm`):

```
            MODE=1                  mismatch (and DELAY=0)
 StPerf ───────────► StTmrRun ───────────────────────► StTmrUnload   irq high
   ▲                  ▲   │ mismatch while DELAY=1:          │
   │ MODE=0           │   └─ remembered (pending) and        │ write SP_STORE
   │ (from any        │      started once DELAY is cleared   ▼
   │  TMR state)      └──────────── write RELOAD_DONE ── StTmrReload
```

1. **Detect.** In `StTmrRun` a mismatch moves the unit to `StTmrUnload`. If
   the DELAY register is set, the mismatch is kept as *pending*, and the
   resync starts in the first cycle after software clears DELAY. A critical
   section can therefore finish before it is interrupted.
2. **Unload.** While in `StTmrUnload`, the unit holds the interrupt input of
   all three cores high. It is ORed onto the `irq` of the bundle each core
   receives. The routine pushes the registers and the return PC (MEPC) onto
   the stack. Every one of these stores passes the voter, so memory receives
   the majority copy even of the faulty core's registers. The routine ends by
   writing its stack pointer to `SP_STORE`. That write moves the unit to
   `StTmrReload` and drops the interrupt.
3. **Reload.** The cores read `SP_STORE`. All three read the same voted
   value, so they all reload from the same place. They load the saved state
   back and write `RELOAD_DONE`, which returns the unit to `StTmrRun`.
   Finally they return from the interrupt. MEPC was voted too, so all three
   return to the same PC.

Mismatches during unload and reload are counted but start no new resync.
The voter keeps correcting the bus throughout. Clearing MODE returns the
unit to `StPerf` from any state. Changing the mode is meant to go with a
reboot of the cores: in the grouped mode B and C must start from the same
state as A. This RTL does not enforce that.

### Register map (per unit)

The unit's registers sit on the peripheral interconnect. ODRG unit *g* is at
`0x1020_1000 + 0x100*g`. Any master can reach them: the host or the cores.
Accesses are word-wide. Each one is granted in its request cycle, and its
response comes one cycle later.

| offset | name | access | meaning |
|---|---|---|---|
| 0x00 | MODE | RW | bit 0: group the three cores (takes effect one cycle after the write) |
| 0x04 | DELAY | RW | bit 0: hold off re-synchronisation |
| 0x08 | SP_STORE | RW | saved stack pointer; a write ends the unload phase |
| 0x0C | RELOAD_DONE | W | any write ends the reload phase |
| 0x10 | STATUS | R | bits 1:0 state (0 perf, 1 run, 2 unload, 3 reload), bit 2 pending |
| 0x14/0x18/0x1C | CNT_A/B/C | R, write clears | mismatches of core A/B/C, 32-bit, saturating |

## The cluster (`odrg_cluster`)

```
 cores 0,2,4 ─► ODRG 0 ─┐                        ┌─► icache ─► refill port
 cores 1,3,5 ─► ODRG 1 ─┤ six cluster ports ─────┤
                        │ (port i = core i)       └─► core_demux (x6)
                                                        ├─► log_interconnect ─► 16 TCDM banks
                                                        ├─► event_unit          ▲ DMA port, AXI port
                                                        └─► periph_interconnect ─► ODRG 0/1 registers,
                                                              ▲ host port            external port
```

* **Grouping.** ODRG unit 0 holds cores 0, 2 and 4, and unit 1 holds cores
  1, 3 and 5. Core A of each unit is core 0 or core 1. Port *i* carries hart
  id *i*. In the grouped mode the cluster therefore looks like two cores,
  harts 0 and 1.
* **TCDM.** 64 KiB in 16 banks of 1024 × 32 bits, word-interleaved:
  bank = `addr[5:2]`, row = `addr[15:6]`, based at `0x1000_0000`. Each bank
  has a round-robin arbiter (`rr_xbar`). The masters are the six cores, a DMA
  port and an AXI port. An access with no conflict is granted at once and
  returns its data in the next cycle. The banks are register arrays standing
  for SRAM macros, with no ECC.
* **Core demux.** TCDM addresses go to the interconnect, `0x1020_4000`–
  `0x1020_43FF` to the event unit, and everything else to the peripheral
  interconnect. Each core keeps one request outstanding. A new request may be
  granted in the cycle in which the previous response returns, so TCDM
  accesses can run back to back.
* **Event unit.** A barrier. Offset 0 is "arrive": the access is granted, and
  its response is held back until every active port has arrived. Then all
  waiting ports are released in the same cycle. Offset 4 reads the mask of
  active ports. The ODRG units supply the mask: ports B and C of a grouped
  unit drop out. Software can use the mask to learn how many cores share the
  work.
* **Peripheral interconnect.** Seven masters: the six cores and the host.
  Three targets: the two ODRG register blocks, and one external port for the
  timer, the DMA configuration and the way out to the host.
* **Instruction cache.** One direct-mapped cache, 64 lines × 4 words, shared
  by all six fetch ports. The ports read tags and data in parallel, so any
  number of hits are served in the same cycle. Misses are refilled one at a
  time, in round-robin order, over a single refill port.

### Bus protocol

All request/response paths (`mem_req_t`/`mem_rsp_t` in `odrg_pkg`) use one
handshake. The master holds `req`, with `we`, `be`, `addr` and `wdata`,
until `gnt`. The response (`rvalid`, `rdata`) follows later, in order:

* Targets behind `rr_xbar` (banks, ODRG registers, the external peripheral
  port) must answer exactly one cycle after granting. An assertion checks
  this.
* The event unit may hold its response as long as it needs. The core demux
  waits for it.
* The refill port accepts any latency.

## How far this follows the published design

These parts follow the publication:

* The two modes and what each one connects.
* The mux structure of the unit, including the zeros on the unused ports.
* Per-bit voting with detectors that compare against the voted value.
* Per-core mismatch counters.
* The four-state FSM. Unload starts on a mismatch and raises an interrupt to
  all three cores. Unload ends with the stack-pointer write.
* Registers for grouping, delay and the stack pointer.
* Six cores in two groups of three, with the core numbering above.
* 64 KiB in 16 word-interleaved banks with single-cycle access.
* A round-robin crossbar.
* A demultiplexed core data port, an event unit, a peripheral interconnect
  carrying the ODRG registers, and a shared instruction cache.

These are this design's own choices:

* **Reload end.** The publication does not say how the reload phase ends.
  Here a write to `RELOAD_DONE` ends it.
* **DELAY behaviour.** The publication only says the resync "can be
  delayed". Here the mismatch is held pending while DELAY is set.
* **Interrupt.** Level-sensitive, held through the whole unload state, and
  ORed into the cores' existing irq input.
* **Register map.** Offsets, counter width and saturation.
* **Address map.** Taken from common PULP practice.
* **Event unit.** Only a barrier. The real one has much more.
* **Instruction cache.** Organisation and size. The published cluster uses a
  hierarchical cache.
* **Bus protocol.** An OBI-like handshake with fixed one-cycle target
  latency.

Not included:

* The cores (the published cluster uses unmodified Ibex cores).
* The DMA engine, the timer and other peripherals.
* The AXI bus and the host SoC.
* ECC on the TCDM.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`:

| testbench | what it shows |
|---|---|
| `tb_odrg_voter` | vote and detectors on random bundles with single-bit faults and random triples |
| `tb_odrg_fsm` | every FSM transition, delay/pending, ungrouping from each state |
| `tb_odrg_regs` | read-back, strobes, status, counter clear and saturation |
| `tb_odrg_unit` | pass-through, fan-out, zeros on B/C, out-voting, full resync walk, delayed resync |
| `tb_tcdm_bank`, `tb_rr_xbar`, `tb_log_interconnect` | data integrity under conflicts, round-robin order, conflict-free one-access-per-cycle streaming |
| `tb_core_demux`, `tb_periph_interconnect`, `tb_event_unit`, `tb_icache` | routing, barrier release timing, cache hits and refills |
| `tb_odrg_cluster` | whole cluster at default size, end to end (below) |
| `tb_odrg_matmul` | 24×24 and 32×32 32-bit matrix multiplication in both modes |
| `tb_odrg_conv` | 16-bit 2D convolution, 3×3 filter over a 32×32 image, in both modes |

`tb_odrg_cluster` runs these steps:

1. Group both units.
2. Run a data-parallel kernel on the two fault-tolerant cores.
3. Flip one output bit of core 2 for one cycle, and one register bit inside
   core 3 while group 1 has DELAY set.
4. Check that both faults are detected, counted against the right core and
   repaired, and that every result is correct.
5. Reboot in performance mode and run the kernel on six cores, with DMA
   traffic competing for the banks.

It counts mode switches, resyncs, delayed resyncs, voter corrections,
bank-conflict stalls, cache misses and barriers. Each must occur at least
once. In this model a resync takes 42–52 cycles, because the core model saves
only 9 words. A real core saves far more state (about 41 registers for Ibex),
and the routine's length is set by that software, not by the ODRG logic.

`tb_odrg_matmul` and `tb_odrg_conv` give these cycle counts:

| kernel | grouped (2 cores) | performance (6 cores) | ratio |
|---|---|---|---|
| 24×24 MatMul, 32-bit | 42,112 | 14,171 | 2.97 |
| 32×32 MatMul, 32-bit | 99,333 | 33,341 | 2.97 |
| 2D convolution, 16-bit pixels, 3×3 over 32×32 | 17,191 | 5,777 | 2.97 |

The ratio is what matters: it comes close to the ideal 3. Absolute cycle
counts come from the core model's timing and cannot be compared with a real
core. The 24×24 and convolution grouped runs each include one injected register
fault, which is repaired without error. The image and filter sizes of the
convolution are this design's choice.

### Running

With Verilator 5. The package goes first; the other files are found through
`-y`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/odrg_pkg.sv tb/tb_odrg_cluster.sv --top-module tb_odrg_cluster -o sim
./obj_dir/sim
```

Replace `tb_odrg_cluster` with any other testbench name. Every testbench
finishes in seconds. `core_model.sv` in `tb/` is the stand-in for a core. It
is not synthesisable and is not part of the design.

### Changing the design

* `odrg_pkg` holds the core count, group size, bank count, address map and
  register offsets.
* `odrg_cluster` takes `BANK_WORDS`, the TCDM depth per bank, and
  `ICACHE_LINES`.
* `rr_xbar`, `log_interconnect` and `event_unit` are parameterised in their
  port counts.
* The voter takes any width.
* The unit's logic does not depend on what the bundle contains. Another core
  needs only new `core_in_t`/`core_out_t` structs.
