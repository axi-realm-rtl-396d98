# AXI-REALM: predictable access to a shared AXI4 interconnect

In a chip where real-time processor cores share an AXI4 interconnect and its
memories with accelerators, a single accelerator that issues long bursts, or a
slow peripheral that never answers, can delay the cores' accesses without
bound. AXI-REALM fixes this with small units at the edges of an otherwise
unmodified round-robin crossbar:

- an **iRealm unit** at the crossbar ingress of each manager. It cuts long
  bursts into short fragments, buffers write data so a manager cannot hold a W
  channel, and gives each manager a byte budget per time period and per address
  region. A manager that has used its budget is stopped until the period renews
  it. The unit also measures bandwidth and mean latency.
- an **eRealm unit** in front of each subordinate that must be guarded. It
  follows every outstanding transaction stage by stage against a cycle budget
  and checks the AXI4 protocol. On a timeout or a protocol violation it
  answers the open transactions itself with errors, logs what went wrong,
  raises an interrupt and can reset the subordinate.
- a **register file** shared by all units. A **bus guard** in front of it lets
  only the manager that claimed the configuration space program it.

After reset the system does nothing: every iRealm unit is a straight wire and
every eRealm unit is switched off. Software turns the units on and sets them
up at run time.

The top module `axi_realm_top` holds all of this except the crossbar. The
crossbar's manager and subordinate ports are brought out as the `xbar_*` ports.
By default the top has four iRealm units (two cores, two accelerators) with
two regions each, and one eRealm unit. AXI4 is 48-bit address, 64-bit data and
8-bit ID.

## Files

| File | Content |
|---|---|
| `rtl/realm_pkg.sv` | AXI4 channel structs, configuration bus, unit config/status types |
| `rtl/axi_realm_top.sv` | the whole system around the crossbar |
| `rtl/irealm_unit.sv` | one iRealm unit |
| `rtl/axi_isolate.sv` | isolation cell at the iRealm input |
| `rtl/burst_splitter.sv` | granular burst splitter |
| `rtl/burst_meta_queue.sv` | per-burst bookkeeping inside the splitter |
| `rtl/axi_err_sub.sv` | error subordinate for bursts that may not be cut |
| `rtl/write_buffer.sv` | write buffer |
| `rtl/irealm_mr.sv` | monitoring and regulation (budgets, periods, probes) |
| `rtl/erealm_unit.sv` | one eRealm unit |
| `rtl/erealm_tracker.sv` | transaction tables and stage counters, one per direction |
| `rtl/erealm_reset_ctrl.sv` | subordinate reset pulse |
| `rtl/realm_regs.sv` | shared register file |
| `rtl/bus_guard.sv` | ownership filter in front of the register file |
| `rtl/realm_fifo.sv` | small FIFO used by several blocks |
| `tb/tb_<block>.sv` | self-checking testbench for each block |
| `tb/tb_realm_interference.sv` | interference workloads: bursts against a core, period sweep, slow writer |
| `tb/tb_axi_rr_mux.sv` | behavioural round-robin interconnect (two managers, one subordinate) |
| `tb/tb_axi_mem.sv`, `tb/tb_axi_tasks.svh` | AXI4 memory model and manager tasks for the testbenches |

## The iRealm unit

A request passes through three stages:

    manager -> isolation cell -> burst splitter -> write buffer -> crossbar
                                                        |
                                  monitoring and regulation (watches this side)

**Isolation cell.** While isolation is requested, no new AW or AR passes.
Transactions already accepted run to completion. The cell reports "isolated"
only once nothing is outstanding. The unit isolates its manager in three cases:
while switching between bypass and active, while a budget is used up, and when
software asks for it.

**Burst splitter.** Each burst is cut into fragments of 1 to 256 beats. The
fragment length is a register field, so it can change at run time. The
splitter keeps the burst's ID, address, size and remaining beats. It sends the
fragments one after another, moving the address forward each time. The first
fragment goes out in the same cycle the burst arrives.

Write data passes through, with W.last inserted at every fragment boundary.
The B responses of the fragments are merged into a single B for the original
burst. If any fragment failed, that B carries the error. Read data passes
through, but R.last is removed except on the last beat of the original burst.
The manager therefore sees exactly the burst it issued.

Some bursts may not be cut under AXI4: exclusive accesses, WRAP bursts, and
non-modifiable accesses of up to 16 beats. (A non-modifiable burst of more
than 16 beats is cut like any other.) Such a burst passes whole if it fits in
one fragment.
Otherwise an internal error subordinate answers it with SLVERR. The error
subordinate only answers once nothing else is outstanding, so responses on one
ID stay in order. At most 16 fragments per direction may be outstanding.

**Write buffer.** An AXI4 crossbar gives its W channel to a write as soon as
the AW is through. A slow manager can therefore block everyone else's writes
to the same subordinate. The buffer stores up to two AWs and four W beats. It
sends an AW, followed at once by its data, only when the whole fragment is in
the buffer. This costs one cycle per write and is the only latency an active
unit adds. A burst longer than the buffer could never be complete. In that
case the buffer falls back to passing data through once it is full. With a
fragment length of at most four beats this never happens.

**Monitoring and regulation.** This part watches the traffic the unit sends
into the crossbar. Each request is mapped to a region by address: the first
region with `start <= addr < end`. Requests outside all regions are not
regulated. A region with `end <= start` is unused.

Each region keeps a byte budget and a period in cycles, separately for reads
and writes. At the start of each period the budget is reloaded. Each request
takes `(len+1) << size` bytes from it. When any region's budget reaches zero,
the unit isolates the manager and stops the splitter from issuing further
fragments. Both hold until that region's period ends.

The same probe counts the bytes sent to each region, which gives bandwidth. It
also keeps two numbers per direction: the completed transactions, and the
running sum over all cycles of the transactions outstanding. Dividing the sum
by the count gives the mean latency (Little's law). No per-transaction
timestamps are needed.

**Switching.** Enabling or disabling a unit first isolates the manager and
waits until nothing is outstanding. Only then is the path switched and
isolation lifted. When the unit is bypassed, the manager is wired straight to
the crossbar with no added latency.

## The eRealm unit

This is the hardest part of the design.

**ID remapping and tables.** Manager IDs are sparse, so the unit maps each
active ID to a small compact ID. There are two compact IDs by default. The
subordinate sees the compact ID, and responses are mapped back to the original
ID. Each direction has its own tracker with three tables:

- **HT (head/tail) table.** One slot per compact ID. It holds the original ID,
  the number of open transactions and the head and tail of that ID's list. The
  slot number is the compact ID itself, so the HT table also serves as the ID
  remapper.
- **LD (linked data) table.** One entry per open transaction: 2 IDs × 2
  transactions = 4 entries. Each entry holds the address, length, current
  stage, stage counter, beats seen, and a link to the next transaction of the
  same ID.
- **W table (writes only).** A FIFO of LD entries in AW order. W beats carry no
  ID, so this table says which transaction each W beat belongs to. Reads need
  no such table, because every R beat carries its ID and belongs to the oldest
  open read of that ID.

A new request that finds no room is held back, not dropped. This happens when
its ID is new and all HT slots are taken, when its ID already has two open
transactions, or when the LD table is full.

**Stages.** A write goes through six stages and a read through four. Each
stage has its own budget register:

| Stage | Write | Read |
|---|---|---|
| 1 | aw_valid → aw_ready | ar_valid → ar_ready |
| 2 | AW accepted → first w_valid (× len+1) | AR accepted → first r_valid |
| 3 | w_valid → w_ready | first R beat → r_last (× len+1) |
| 4 | first W beat → w_last (× len+1) | r_valid → r_ready |
| 5 | w_last → b_valid | – |
| 6 | b_valid → b_ready | – |

"× len+1" means the register holds a budget per beat, which is multiplied by
the burst length.

The handshake stages (write 1, 3, 6; read 1, 4) are timed by one counter per
channel. The other stages use the counter in each LD entry. Two stages count
only while their transaction is the oldest of its ID: write stage 5 and read
stage 2. The subordinate answers one ID in order, so waiting behind an older
transaction is not charged to the younger one.

Write stage 2 is different. It does count while earlier W bursts are still
being sent, because W data must follow AW order. This is why it is scaled by
the burst length.

Counters are 10 bits wide and saturate. A scaled budget above 1023 is clipped
to 1023. A budget of 0 turns off the check for that stage.

**Faults.** There are two kinds of fault:

- **Timeout.** A stage counter reaches its budget.
- **Protocol violation.** A response arrives for an ID with nothing open, a B
  arrives before the last W beat, or R.last comes on the wrong beat.

The first fault after the log was cleared is logged with its cause, its stage,
the manager ID and the address. If enabled, an interrupt is raised.

Then the unit flushes. It cuts the subordinate off and completes every open
transaction towards the manager itself:

- it accepts the remaining W beats;
- it answers each write with a SLVERR B;
- it sends each read's missing R beats with SLVERR, ending with R.last.

All of this happens in per-ID order. With automatic reset enabled, the
subordinate's reset goes low in the cycle after the fault is detected and
stays low for four cycles. Once the tables are empty and the reset is over,
normal operation resumes. Software can also pulse the reset itself.

## Configuration

The configuration bus is a simple single-cycle bus. A request carries valid,
write, a 16-bit address, 64-bit data and the manager's ID. The response carries
ready, rdata and error.

**Bus guard.** After reset, every access fails except a write to the guard
register at 0xFFF8. That write claims the configuration space for the writer's
ID. From then on only the owner gets through. Anyone else gets an error, and
their access never reaches the registers. The owner hands ownership to another
manager by writing that manager's ID to the guard register. Reading the guard
register is allowed to anyone. It returns bit 63 = claimed and the owner's ID
in the low bits.

**Register map** (64-bit registers, 8-byte aligned; unmapped addresses and
writes to read-only registers return an error):

| Address | Register |
|---|---|
| u·0x200 + 0x00 | iRealm CTRL: [0] enable [1] regulate [2] write buffer on [3] isolate, [15:8] fragment beats − 1 (reset 255) |
| u·0x200 + 0x08 | iRealm STATUS (ro): [0] active [1] isolated [2] budget depleted |
| u·0x200 + 0x10 / 0x18 | write / read latency sum (ro) |
| u·0x200 + 0x20 / 0x28 | completed writes / reads (ro) |
| u·0x200 + 0x40 + r·0x40 + 0x00 / 0x08 | region start / end (end exclusive) |
| … + 0x10 | budget: [31:0] write bytes, [63:32] read bytes |
| … + 0x18 | period: [31:0] write cycles, [63:32] read cycles |
| … + 0x20 | budget left (ro), same layout |
| … + 0x28 | bytes transferred (ro), same layout |
| 0x1000 + e·0x100 + 0x00 | eRealm CTRL: [0] enable [1] irq enable [2] auto reset; write 1 to [3] to reset the subordinate, to [4] to clear the log |
| … + 0x08 | eRealm STATUS (ro): [0] logged [1] write [3:2] cause (1 timeout, 2 protocol) [6:4] stage [7] active [8] busy [23:16] manager ID |
| … + 0x10 | failing address (ro) |
| … + 0x20 + k·8 | write stage k+1 budget |
| … + 0x50 + k·8 | read stage k+1 budget (k = 0..3 used) |

## Where this design departs from the paper

- **Number of iRealm units.** The integration text names four iRealm units
  (two cores, two accelerators), while the parameter table lists three. The
  default here is four.
- **What a used-up budget does.** The paper says both "the number of
  outstanding transactions is reduced" and "the manager is completely
  isolated". This design isolates the manager and stops further fragments.
  It does not separately lower an outstanding limit.
- **When bytes are charged.** The paper reduces the budget for every beat that
  passes. Here a whole fragment's bytes are charged when its request is
  accepted. The total per period is the same.
- **Bursts that may not be cut.** The paper only forbids cutting atomic bursts
  and non-modifiable bursts of up to 16 beats. Here every exclusive access is
  treated as atomic, and WRAP bursts are not cut either. Such a burst, or a
  short non-modifiable one, is rejected with SLVERR when it is longer than one
  fragment.
- **Recovery.** The paper's waveform shows an eRealm-completed transaction
  being "restarted". Here it is completed with an error and the subordinate
  is reset. Replaying the transaction is left to software.
- **Reset timing.** The paper says the reset comes "within one clock cycle" in
  one place and "within two cycles" in another. Here it starts one cycle after
  detection, so the second statement holds.
- **Latency measurement.** The paper tracks average latency without saying
  how. Here it is the outstanding-count sum described above.
- **Not implemented:**
  - a build option to leave out the burst splitter;
  - separate register files per unit;
  - the crossbar itself;
  - the processors, accelerators and memories of the evaluated chip.

Sizes from the evaluated chip, checked against this design:

- An Ethernet controller with 256-beat bursts and a 300-cycle data-stage
  budget: the per-beat budget can only give 256 or 512 cycles for such a burst.
- The 6400-byte, 1600-cycle budgets of the period sweep fit the 32-bit
  registers.

## Simulation

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<m>` and stops, and it has a watchdog.

With Verilator 5, from the repository root:

    verilator --binary --timing --assert -Wno-fatal -Wno-lint -Wno-style \
      --timescale 1ns/1ps -y rtl -y tb +libext+.sv -Irtl -Itb \
      rtl/realm_pkg.sv tb/tb_axi_realm_top.sv --top-module tb_axi_realm_top \
      --Mdir build -o sim
    ./build/sim

Replace `tb_axi_realm_top` with any other `tb_<block>` to test one block.

`tb_axi_realm_top` builds the top at its default size. The three memories
behind iRealm units 0–2 stall at random. iRealm unit 3 loops back through the
eRealm unit to a memory whose B channel can be made to hang. The testbench
goes through each mechanism in turn and counts it:

- rejected configuration access before the claim;
- claim and handover;
- bypass;
- fragmentation;
- write buffering;
- budget depletion and renewal;
- probe counters;
- isolation;
- eRealm timeout, interrupt, flush, subordinate reset and recovery.

`tb_realm_interference` runs the interference workloads. Two iRealm units
feed a behavioural round-robin interconnect and one memory. A core issues
single-beat accesses, and a DMA engine issues long bursts. The testbench prints
the core's worst latency in each case:

| Case | Worst core latency |
|---|---|
| 256-beat DMA reads, units bypassed | 505 cycles |
| same, fragments of one beat | 2 cycles |
| slow 16-beat DMA writes, bypassed | 55 cycles |
| same, 4-beat fragments with the write buffer | 8 cycles |

It also sweeps the regulation period over 50, 200 and 1600 cycles, with the
budget set to half of what the memory could deliver in a period. In each case
the DMA receives exactly half of the memory's beats.

In the published evaluation, on the full chip, the core's worst latency fell
from 266 to 11 cycles. The numbers here are lower because the model memory
answers every cycle and the interconnect adds no pipeline stages. The trend is
the point of the comparison, not the exact values.

`tb_erealm_unit` also runs an Ethernet-like setting. Every stage has a
20-cycle budget, except the data stage, which has 2 cycles per beat. A 256-beat
read passes. A 256-beat read whose subordinate stops after the first beat is
caught in the data stage 512 cycles later, and the subordinate is reset in the
next cycle.
