# Multi-core trace, trigger and emulation memory for a powertrain controller

Engine and gearbox controllers cannot be stopped at a breakpoint and inspected
at leisure. The machine they control must keep running, and with two or more
unsynchronised cores the interesting bugs are in how their accesses to shared
variables interleave. This RTL holds the on-chip logic a development version of
such a controller adds for this:

* **Trace.** Every core gets a trace-and-trigger unit, and the multi-master
  system bus gets one of its own. Each unit stamps what it observes with a
  common cycle counter, filters it down to what the developer asked for, and
  compresses it. The units' messages are then merged into one
  stream in true temporal order, down to the clock cycle, and stored on chip.
* **Triggering and breaking.** Trigger lines from all cores are combined by a
  programmable cross-trigger unit (AND, OR, counter). A reconfigurable break and
  suspend switch decides which cores and peripherals stop, and stops them in the
  same cycle.
* **Emulation RAM.** 512 KB of RAM is split into 64 KB blocks. Each block serves
  either as flash *overlay* memory or as trace memory. Overlay memory is used to
  tune calibration data while the engine runs: up to 16 flash ranges are
  redirected into the RAM with unchanged timing, and the data can be flipped
  between two pages with a single register write.

The architecture follows the paper "Debug Support, Calibration and Emulation for
Multiple Processor and Powertrain Control SoCs" (Mayer, Siebert, McDonald-Maier).
That paper gives the block structure and a few numbers: two cores in its
figures, 16 overlay ranges of 1 to 32 KB, and 512 KB of RAM in 64 KB blocks.
It does not give bit widths, message formats, handshakes, bus protocols or register layouts,
so those are this design's own. They are listed in
[Where this design departs from or adds to the architecture](#where-this-design-departs-from-or-adds-to-the-architecture).

## Block structure

```
          core A signals                core B signals
                |                             |
        +-------v--------+            +-------v--------+
        | mcds_trace_unit|            | mcds_trace_unit|     mcds_timestamp
        |  mcds_adapt    |            |   (same)       |<--- (one cycle counter
        |  prog | data   |            |                |      for all units)
        |  recon| recon  |            |                |
        |  FIFO | FIFO   |            |                |
        |  msg sorter    |            |                |
        +--+---------+---+            +---+--------+---+
   triggers|         |messages   messages|        |triggers
           |         |   system bus      |        |
           |         |  (all masters)    |        |
           |         |  +--------------+ |        |
           |         |  | mcds_bus_unit| |        |
           |         |  +------+-------+ |        |
           |      +--v---------v---------v-+     |
           |      | mcds_msg_sorter (system)|     |
           |      +-----------+------------+     |
           v                  v                  v
     +-------------+    +-----------+     (trigger pins)
     | mcds_xtrig  |--->| trace_wr  |          |
     | AND/OR/Cnt  |ctrig+-----+-----+          |
     +--+-------+--+          | trace words    |
  Enable|       |core/complex  v                |
 (to    |       | triggers  +---------------------------+    host bus
  units)|       v           |  emem: 8 x 64 KB banks    |<-- (debugger / debug
        |  +-----------+    |  trace | overlay | host   |     core) + dbg_regs
        |  |mcds_brk_  |    +------------^--------------+
        |  |switch     |                 | overlay reads
        |  +--+--+--+--+          +------+------+
        |  halt susp ext out      | ovl_access  |<--> core flash reads
                                  | ovl_addr_map|<--> flash
                                  +-------------+
```

`psi_debug_top` instantiates all of it for `NCORE = 2` cores and one system
bus. The cores, the bus and its masters, the
program flash, the extra debug core and the external interfaces (JTAG, USB,
CAN) are not part of the RTL; their signals are ports of the top.

## The trace path and its ordering guarantee

### From core signals to messages

`mcds_adapt` is the only core-specific part. It turns the core's signals into
two kinds of generic records, each carrying the cycle stamp of its event:

* **Program record:** the address and length of every retired instruction.
* **Data record:** one per bus access. The core's bus has an address phase
  (`d_rd`/`d_wr`) and, for reads, a later data phase (`d_rvalid`). The
  adaptation holds a read's address and stamp until the data arrives. The
  record therefore carries address, data and the time of the *address phase*.
  One read may be outstanding, and accesses complete in order; assertions check
  both rules.

`mcds_prog_recon` compresses the instruction stream. It remembers where the next
instruction would be if execution ran straight on (previous PC plus length). It
emits a message only when an instruction retires anywhere else: a taken branch,
call, return or interrupt. The message carries the new address and the number of
instructions executed in sequence before it. A decoder holding the program image
can rebuild the full instruction flow from these messages. The first instruction
after tracing starts always produces a message, so the decoder has a place to
start. Two PC range comparators produce trigger lines.

`mcds_data_recon` emits one message per data access. The message kind is
`MSG_RD` or `MSG_WR`, with address, data and stamp. With *qualification* on, only
accesses inside comparator 0's address range are traced; this is how the trace
is narrowed to, say, the variables two cores share. Comparator 1 can in
addition require a data value under a mask (a watchpoint such as "0xDEAD
written to this variable").

A message (`trace_msg_t` in `mcds_pkg`) holds a 32-bit stamp, a 2-bit source
(the trace unit), a 2-bit kind, a 4-bit bus master number (0 for core
messages), a 32-bit address and a 32-bit data word.

### Tracing the system bus

Bus traffic is traced independently of the cores, so accesses by DMA or other
masters, which no core's trace shows, appear in the same time-ordered record.
`mcds_bus_unit` is the bus's trace unit. Its adaptation, `mcds_bus_adapt`,
watches a pipelined bus: an address phase (master number, direction, address)
is taken in a cycle with `bus_ready` high, and its data phase is the next
cycle with `bus_ready` high. A new address phase can overlap the previous data
phase, and a low `bus_ready` stretches both. The adaptation pairs each data phase
with its address phase and produces the same kind of data record as a core,
carrying the master number and the stamp of the address phase. The record then
goes through the same `mcds_data_recon` as a core's data accesses, with its own
qualification range and value watchpoint, and into a message FIFO. The unit's
messages enter the system sorter as a third input (source 2). There is no
program path, since a bus has no instruction flow. The bus unit's comparator
lines are not wired to the cross trigger, which takes only core triggers.

### Buffering

Each reconstruction stage writes into its own `mcds_msg_fifo` (8 entries by
default). The observed core is never stalled. If a message arrives at a full
FIFO, it is dropped and a sticky overflow flag is set, which software can read
in the status register. This keeps the trace non-intrusive: a lost message is
reported, and the core's timing is never changed.

### Merging in temporal order

`mcds_msg_sorter` merges N streams. It is used twice: inside every unit (program
FIFO + data FIFO) and once at system level (all units). Ordering is the subtle
part.

Messages reach a sorter some cycles after they were stamped. Within a unit this
is three cycles (adaptation register, reconstruction register, FIFO), plus, for
reads, the wait for the data phase. So when one input is empty, the sorter
cannot tell whether an *older* message is still on its way there. The rule used:

> The candidate is the oldest message at any input. It is released when every
> input holds a message, or when it is at least `HOLD` cycles old.

If `HOLD` is at least the largest delay from stamping to arrival, then every
message stamped before the candidate has already arrived when the candidate is
released. The output is then strictly in time order. At the system level the
largest delay is the unit sorter's own `HOLD` (a unit shows its oldest message
at the latest `HOLD` cycles after its stamp), so the same `HOLD` serves both
levels. The default `HOLD = 8` covers a read data phase up to five cycles after
its address phase. A core with slower reads needs a larger `HOLD`. The bus unit
has no unit sorter: its messages reach the system sorter three cycles after the
data phase. With `HOLD = 8`, a bus data phase must end within five cycles of its
address phase for the output to stay strictly ordered.

Time stamps are compared by their wrapped difference. Ordering is therefore
correct across counter wrap-around as long as messages are less than 2^31 cycles
apart in age. Equal stamps go to the lower-numbered input. An assertion in
every sorter checks that its output never goes back in time.

The cost of this rule is latency, not bandwidth. When only one core is active,
its messages wait `HOLD` cycles before leaving the sorter.

### Trace memory

`trace_wr` writes each released message into the emulation RAM as four words:

| word | contents |
|---|---|
| 0 | `{kind[31:30], source[29:28], bus master[27:24], sequence number[23:0]}` |
| 1 | time stamp |
| 2 | address (branch target or data address) |
| 3 | data (sequential instruction count or data value) |

The buffer is circular, between the programmed base and limit word addresses,
so it always holds the newest messages. The status register reports when it has
wrapped. When the complex trigger fires, the writer stores a programmed number
of further messages and then stops, which keeps the history around the event.
To read the buffer, start at the write pointer if it has wrapped; the sequence
numbers then run on without gaps. Storage takes four cycles per message, so the
merged stream may average at most one message per four cycles; bursts wait in
the FIFOs. The end-to-end test runs two cores and the bus at about 0.2
messages per cycle without overflow. A bus that is busy every cycle produces
four times what the writer can store. Tracing it needs qualification that cuts
the traced transfers to fewer than one in four cycles on average.

## Triggers, cross triggers and breaking

`mcds_xtrig` has the structure of the cross-trigger figure in the source paper.
Each core has an **AND** and an **OR**; the centre has an **AND**, a
**Counter** and an **OR**.

* Per core: the core's four comparator lines, its trigger pin and the fed-back
  complex trigger form a 6-bit vector. The AND term takes the bits in
  `and_mask`; an empty mask makes it false. The OR combines the AND term with
  the single bits in `or_mask`. The OR result is the core's trigger
  (`core_trig_o`). It also drives the core's **Enable**, which gates that core's
  trace when its unit has `gate` set. With `latch` set, Enable stays on from the
  first firing until cleared. Setting `latch` gives a "start tracing when the
  task is entered" window.
* Centre: an AND over the selected cores' triggers, and a counter of the cycles
  in which that AND is true. The counter fires once each time it reaches
  `cnt_limit`, then restarts. The central OR of selected core triggers, the AND
  and the counter is registered and becomes the **complex trigger**. One cycle
  later it is fed back to the per-core terms, so there is no combinational
  loop.

`mcds_brk_switch` turns triggers into actions. Its sources are each core's
trigger, the complex trigger and two external trigger pins. For each source a
route selects the cores to halt, the suspend lines to raise (peripherals such as
timers that must stop with the cores) and the external trigger outputs to drive.
All targets reached in one cycle are set on the same clock edge, one cycle after
the source. Two cores routed to the same source therefore stop in the same cycle
with no slippage. Targets stay set until a release command. The source that
caused the break is kept in the status register.

## Flash overlay

`ovl_addr_map` compares a flash address with 16 ranges at once. A range has an
enable, a size code (1, 2, 4, 8, 16 or 32 KB), a flash base aligned to its size
and a byte offset into the emulation RAM. If ranges overlap, the
lowest-numbered one wins. A hit is redirected to
`offset + (address mod size) + (page ? page_stride : 0)`. The page bit is one
register bit, so one host write moves all 16 ranges from page 0 to page 1
together. A typical use is switching between working and reference calibration
data.

`ovl_access` sequences one read at a time from the core's flash port. A miss
goes to the flash and is answered when the flash answers. A hit reads the RAM and
answers exactly `ws + 1` cycles after the request, `ws` being the programmed
flash wait states. Code and data run with the same timing from the overlay as
from flash. The page bit is sampled at the request, so a swap never splits an
access.

## Emulation RAM and host access

`emem` is 512 KB made of eight 64 KB banks of 32-bit words, one access per
bank per cycle. A register bit per block assigns it to trace or to overlay. The
overlay port may read only overlay blocks and the trace port may write only
trace blocks. A wrong-kind access is not performed and sets a sticky error flag.
The host port reaches every block at the lowest priority: in a cycle where the
overlay or trace port uses the same bank, `host_ready_o` is low and the host
repeats the request. Real-time traffic is never delayed by the debugger. On
silicon each bank would be an SRAM macro; here it is a word array.

The host bus of `psi_debug_top` serves a debugger (for example through JTAG)
or the extra debug core that runs the USB or CAN calibration protocol. Byte
address bit 20 selects the register file (`dbg_regs`; word index = address
bits 8:2); otherwise bits 18:2 address the emulation RAM word. Reads return data
on `host_rvalid_o` one cycle after the accepted request. The full register map
is in the header of `rtl/dbg_regs.sv`.

## Parameters and sizes

| name | default | where | from |
|---|---|---|---|
| `NCORE` | 2 | `mcds_pkg` | two cores in the paper's figures |
| `NRANGE` | 16 | `mcds_pkg` | paper |
| `MIN_BLK`, `MAX_BLK` | 1 KB, 32 KB | `mcds_pkg` | paper |
| `EMEM_BYTES`, `BLK_BYTES` | 512 KB, 64 KB | `mcds_pkg` | paper |
| `ADDR_W`, `DATA_W`, `TS_W` | 32 | `mcds_pkg` | this design |
| `NCMP` | 2 per path | `mcds_pkg` | this design |
| `NEXT`, `NSUSP` | 2, 4 | `mcds_pkg` | this design |
| `MST_W` | 4 (16 bus masters) | `mcds_pkg` | this design |
| `FIFO_DEPTH` | 8 | `psi_debug_top` | this design |
| `HOLD` | 8 | `psi_debug_top` | this design, see the ordering section |
| counter width | 16 | `mcds_xtrig` | this design |

All sizes are the defaults; nothing was scaled down.

Some configurations need more room than 512 KB. At its maximum the overlay map
covers 16 × 32 KB = 512 KB. That fills the whole emulation RAM with one page and
leaves no block for trace. Two full pages at that size (1 MB) do not fit, so
with both pages the ranges can total at most 256 KB per page. The paper does
not give the split between overlay and trace.

## Where this design departs from or adds to the architecture

These follow the source paper: the per-core unit structure (adaptation;
program and data reconstruction, each with message generation, trigger
extraction and a message FIFO; a message sorter in each unit and across units),
cycle-resolution time stamps shared by all cores, trace qualification and
compression, the AND/OR/Counter cross trigger with per-core Enable and a complex
trigger, a reconfigurable break and suspend switch for on-chip and external
triggers, 16 overlay ranges of 1 to 32 KB, two atomically swapped pages,
flash-matched overlay timing, and 512 KB of RAM in 64 KB blocks used for overlay
or trace.

These are this design's own choices:

* All widths: 32-bit addresses, data and stamps, and 32-bit RAM words.
* The core bus model: split read phases, one outstanding read.
* The system bus protocol (pipelined address and data phases with one ready),
  16 masters, the master number in the message, and the bus unit built from
  the core's data reconstruction.
* The branch-trace message format and the four-word storage layout.
* The number of comparators, and the value match on comparator 1 only.
* FIFO depth, and the drop-newest overflow policy.
* The sorter's release rule.
* Masks as the way of making the AND and OR gates programmable; the counter
  counting cycles of the central AND.
* The routing registers of the break switch, and hold-until-release.
* Power-of-two, size-aligned overlay ranges; pages as a global stride added to
  every range.
* The wait-state model of flash timing.
* Bank priorities in the RAM.
* The register map and the host address split.

Not included, because they are existing parts the architecture uses rather than
logic it defines:

* The processor cores and the extra debug core.
* The USB 1.1, JTAG and CAN interfaces, and the calibration protocol software.
* The program flash.
* Everything physical: the emulation region at the edge of the die, the
  two-chip variants, the package and its bonding, and the separate supply for
  the emulation RAM.

The architecture also traces "general system states". It does not say which
states these are, so nothing is built for them.

## Files and simulation

`rtl/` holds one module or package per file: `mcds_pkg.sv` (types and
constants, compile it first), `mcds_timestamp`, `mcds_adapt`, `mcds_prog_recon`,
`mcds_data_recon`, `mcds_msg_fifo`, `mcds_msg_sorter`, `mcds_trace_unit`,
`mcds_bus_adapt`, `mcds_bus_unit`,
`mcds_xtrig`, `mcds_brk_switch`, `ovl_addr_map`, `ovl_access`, `emem`,
`trace_wr`, `dbg_regs` and the top, `psi_debug_top`.

`tb/` has a self-checking testbench `tb_<module>.sv` for each module. Each
compares the module with an independent model in the testbench, stops itself
after a fixed number of cycles, and prints
`TB_RESULT checks=N failures=M`. `tb_psi_debug_top` runs the whole design at its
default sizes in two phases:

1. **Overlay.** Flash reads and overlay reads with timing checks, a page swap,
   and host reads held off by bank conflicts.
2. **Trace and break.** Two core models with a qualified shared-variable trace,
   and a bus model whose transfers from several masters, with wait states, are
   traced over one address range. Core B's trace starts only through the cross-trigger Enable. A data
   watchpoint drives an external trigger output. The counter raises the complex
   trigger, which halts both cores in one cycle and raises a suspend line. The
   trace buffer wraps and then stops after the trigger. The buffer is read back
   and every stored message is checked against the messages predicted from the
   stimulus.

The test counts each of these mechanisms and fails if one never happened. It
runs in well under a minute.

`tb_overlay_workloads` runs the overlay at the sizes the RAM is built for, also
on the unmodified top. It fills all 512 KB through the host port. It then maps
16 ranges of 32 KB onto the whole RAM, and next 16 ranges of 16 KB on two pages
of 256 KB, swapped while reads continue. Every read is checked for data and for
`ws + 1` latency, and every range on each page must be hit.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/mcds_pkg.sv tb/tb_psi_debug_top.sv --top-module tb_psi_debug_top
./obj_dir/Vtb_psi_debug_top
```

The simulator is two-state, so every register the design reads is reset. The
RTL also passes `verilator --lint-only -Wall` with warnings only. The remaining
warnings are unused bits of shared configuration structures and unconnected
optional outputs.
