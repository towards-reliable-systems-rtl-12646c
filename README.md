# AXI4 Transaction Monitoring Unit (TMU)

An AXI4 subordinate that hangs, or a manager that stops taking responses,
can freeze an interconnect for good. This design puts a small watchdog on
the link between an AXI4 interconnect and one subordinate.

The TMU keeps a record of every outstanding read and write and times each
one against a budget, either per phase or for the whole transaction. It
also checks a few protocol rules. When something goes wrong, it:

1. cuts the subordinate off;
2. answers every transaction still open with `SLVERR`, so the manager side
   drains cleanly;
3. asks an external reset unit to reset the subordinate;
4. raises an interrupt;
5. resumes monitoring once the reset has been acknowledged.

In normal operation all channels pass straight through combinationally, so
the TMU adds no cycles.

It comes in two flavours, chosen by one parameter:

| | Full-Counter (`FullCounter = 1`, default) | Tiny-Counter (`FullCounter = 0`) |
|---|---|---|
| counters per transaction | one per phase (6 for writes, 4 for reads) | one |
| budget | one per phase | sum of the phase budgets |
| a stall is caught | as soon as its phase overruns | only when the whole budget is used up |
| latency log | per phase | whole transaction |
| size (this RTL, defaults, yosys generic cells) | 2877 cells, 6452 flip-flop bits | smaller; the counter and budget arrays shrink about 6x |

A prescaler (`PrescalerStep`) can make the counters advance only every N
cycles. This trades detection precision for narrower counters.

## Where it sits

```
                 mst_* (TMU acts as subordinate)        slv_* (TMU acts as manager)
 interconnect ───────────► ID remap ──┬─► write guard ──┬──► gates ('0 when cut off) ───► subordinate
              ◄─────────── SLVERR mux ◄┴── read guard ◄─┴──── responses ◄─────────────────
                                           │      │
                                   registers/irq  reset_req_o ──► reset unit ──► reset_ack_i
```

- `tmu_top` holds the following blocks:
  - the ID remapper (`tmu_id_remap`);
  - a write guard (`tmu_write_guard`), for AW, W and B;
  - a read guard (`tmu_read_guard`), for AR and R;
  - the register file (`tmu_regs`).
- Each guard owns a tracking table (`tmu_ott`), a budget calculator
  (`tmu_budget_alloc`) and a prescaler (`tmu_prescaler`).
- Shared types, phase encodings, error codes and the register map are in
  `tmu_pkg`.
- `pass` is high while both guards are monitoring and neither flags a fault
  this cycle.
- With `pass` high, every request signal to the subordinate equals its
  input and every response to the manager equals the subordinate's.
- With `pass` low:
  - the request outputs are forced to zero;
  - responses come from the guards' abort logic, with `SLVERR`;
  - write data from the manager is accepted and discarded.

## ID compaction

A manager's AXI IDs are wide (`MstIdWidth = 8` here) and sparse. The
remapper keeps a table of `MaxUniqIds` slots per direction. Each slot holds
an original ID and the number of transactions open under it.

- A new request reuses the slot that already holds its ID.
- Otherwise it takes the lowest free slot.
- The subordinate sees only the slot number (`$clog2(MaxUniqIds)` bits).
- Responses get the original ID back from the table.
- A request stalls (no valid forwarded, ready low) while every slot holds
  another ID, or while its slot already has `TxnPerUniqId` transactions
  open.
- The chosen slot is held while the request waits for ready, so the ID
  the subordinate sees stays stable.

Responses to one compacted ID stay in order, which AXI requires for one ID.
Two different original IDs never share a slot, so compaction adds no ordering
beyond what AXI already imposes.

## The tracking table

Each guard has an Outstanding Transaction Table of
`MaxUniqIds x TxnPerUniqId` slots (16 by default). It has three parts:

- **Head/tail table**, indexed by compacted ID. It holds a head pointer, a
  tail pointer and a count for each ID. It turns the slots of one ID into a
  FIFO, which gives the order responses must come back in.
- **Linked-data slots.** Each slot has a valid bit and a next pointer. The
  guard keeps the payload in arrays indexed by slot:
  - address, length and beats seen;
  - event flags;
  - budgets;
  - counters.
  
  Free slots are allocated lowest first.
- **Enqueue-index FIFO** (write guard only). It records slot numbers in
  AW order. W beats carry no ID, so each beat belongs to the oldest write
  whose data is not complete. The read guard matches R beats by their ID
  and does without it.

A request is entered when its `aw_valid`/`ar_valid` is first seen, not when
it is accepted. This lets the address-handshake phase be timed. When the
table is full, or the ID's list is full, the guard holds the request's gate
low. The request then waits, and nothing overflows.

## Phases, events and counters

Every slot has one event flag per phase boundary. A flag is set on the
clock edge the event is seen, regardless of the prescaler; these are the
"sticky" bits. The slot's current phase is the first event not yet seen.
The counters are the only part that moves on prescaler ticks.

| write phase | counter | from | to |
|---|---|---|---|
| address handshake | AW0 | `aw_valid` | `aw_ready` |
| data-phase entry (queue wait) | AW1 | AW handshake | first `w_valid` of this write |
| first data handshake | W0 | first `w_valid` | first `w_ready` |
| burst | W1 | first beat | `w_last` beat |
| response wait | B0 | `w_last` | `b_valid` |
| response handshake | B1 | `b_valid` | `b_ready` |

| read phase | counter | from | to |
|---|---|---|---|
| address handshake | AR0 | `ar_valid` | `ar_ready` |
| queue wait | AR1 | AR handshake | first `r_valid` of this read |
| first data handshake | R0 | first `r_valid` | first `r_ready` |
| burst | R1 | first beat | `r_last` beat |

- **Full-Counter:** only the counter of the current phase runs. A timeout
  fires when that counter reaches the phase's budget.
- **Tiny-Counter:** the single counter runs from the first `aw_valid` (or
  `ar_valid`) to the B handshake (or the `r_last` handshake), against the
  total budget.
- The cycle in which a request is entered counts as the first tick.
- A counter saturates rather than wrapping.

### Budgets

Software writes one budget per phase in cycles, plus a budget per data
beat, separately for writes and reads. When a request is entered,
`tmu_budget_alloc` fixes its budgets:

- queue-wait phase = configured value + (beats still owed by earlier
  requests of this guard) x per-beat budget. A request queued behind long
  bursts therefore gets more time;
- burst phase = configured value + (`len` + 1) x per-beat budget;
- every other phase = configured value;
- Tiny-Counter total = sum of all phase budgets;
- conversion to ticks rounds up to whole prescaler steps;
- with a prescaler (step > 1), one extra tick is added. A phase that lasts
  exactly its budget can cross one more tick boundary than it has whole
  steps, and the extra tick keeps such a phase from being flagged. A late
  phase is then flagged up to two steps after its budget;
- results are clipped to the counter range. With `CntWidth = 10` that is
  1023 cycles, or 1023 / step ticks.

The reset values are for a 250-beat write on a 64-bit bus (2000 bytes):

| AW0 | AW1 | W0 | W1 | B0 | B1 | per beat |
|---|---|---|---|---|---|---|
| 10 | 20 | 10 | 0 | 20 | 10 | 1 |

The burst budget is 0 + 250 x 1 cycles. The Tiny-Counter total is 320
cycles.

These defaults assume a subordinate that runs at full speed. A subordinate
that inserts wait states needs larger budgets; otherwise its transfers are
flagged as timeouts.

## Checks

| code | name | raised when |
|---|---|---|
| 1 | timeout | the current phase counter (Full-Counter) or the whole-transaction counter (Tiny-Counter) reached its budget |
| 2 | unrequested response | a B or R arrives for an ID with nothing open |
| 3 | wrong last flag | `w_last`/`r_last` is not on beat `len`+1 |
| 4 | early response | a B before the AW handshake or before the `w_last` beat, or an R before the AR handshake |
| 5 | peer | the other guard faulted; this guard only aborts |

The oldest timed-out slot is reported first.

- Protocol violations are raised in the cycle the offending handshake
  appears.
- Timeouts are raised in the cycle the counter reaches the budget.
- The fault cycle itself already blocks everything, because `pass` goes
  low combinationally.
- Error detection looks at the raw handshake signals, so there is no
  combinational loop through `pass`.

## What happens on a fault

Each guard has four states:

1. **MONITOR**: normal operation.
2. **ABORT**: both guards leave MONITOR together, as one fault stops
   `pass` for both. Each guard answers its open transactions:
   - The write guard sends one `SLVERR` B for every write whose address
     the subordinate had accepted, one ID at a time in order. A write whose
     address was never accepted is dropped silently; its manager still
     holds `aw_valid` and is served after recovery.
   - The read guard sends the beats each accepted read still owes, all
     `SLVERR`, with `r_last` on the final one. Every read therefore
     receives exactly `len`+1 beats.
   - Write data arriving meanwhile is accepted and dropped.
3. **WAIT**: a guard whose table is empty waits here for the other one.
4. **RESET**: `reset_req_o`, the OR of both guards' requests, is held until
   `reset_ack_i`. If bit 2 of CTRL is clear, this step is skipped.

After RESET, the tables are cleared and monitoring resumes. The interrupt
status bit of the faulting side is set when the fault is detected.

Cutting off the subordinate has one side effect. If a B or R was waiting
for ready at the moment of the fault, its `valid` disappears for one cycle.
The same transaction is then answered again by the abort sequence. An
assertion in `tmu_top` allows that one cycle and nothing else.

A manager that never accepts B or R cannot be rescued by this scheme: the
abort responses wait for that manager's ready like any other response.

## Registers

The register port is simple: valid, write, 8-bit byte address, 32-bit data,
and an error flag for an unknown address. It answers in the same cycle.
Bus adaptation is left to the integrator.

| address | register |
|---|---|
| 0x00 | CTRL: [0] monitoring enable, [1] interrupt enable, [2] reset request enable (reset value 0b111) |
| 0x04 | IRQ: [0] write fault, [1] read fault; write 1 to clear |
| 0x10-0x24 | write budgets AW0, AW1, W0, W1, B0, B1 (cycles) |
| 0x28 | write budget per beat |
| 0x30-0x3c | read budgets AR0, AR1, R0, R1 |
| 0x40 | read budget per beat |
| 0x44 / 0x48 | write error record / low 32 bits of its address |
| 0x4c / 0x50 | read error record / address |
| 0x60-0x74 | per-phase counters of the last completed write (ticks; Tiny-Counter: only 0x60) |
| 0x80-0x8c | per-phase counters of the last completed read |
| 0x90, 0x94, 0x98 | completed writes, completed reads, faults |

Error record fields:

| bits | field |
|---|---|
| [21:19] | code |
| [18:16] | phase at the fault |
| [15:8] | compacted ID |
| [7:0] | slot |

## Parameters of `tmu_top`

| parameter | default | meaning |
|---|---|---|
| `FullCounter` | 1 | Full-Counter (1) or Tiny-Counter (0) |
| `MaxUniqIds` | 4 | distinct IDs tracked at once, per direction |
| `TxnPerUniqId` | 4 | open transactions per ID; table size is the product, 16 |
| `PrescalerStep` | 1 | counter tick every N cycles (32 for the prescaled flavours) |
| `CntWidth` | 10 | counter width in cycles; with a prescaler, `CntWidth - log2(step)` bits are kept |
| `AddrWidth` | 48 | address width |
| `DataWidth` | 64 | data width |
| `MstIdWidth` | 8 | manager ID width |

The AXI signals carried are id, addr, len, size, burst, data, strb, last
and resp. Lock, cache, prot, QoS, region and user signals are not carried;
add them as pass-through wires if your system uses them.

## Departures and own choices

Several points were not fixed by the design description this RTL follows
and are this implementation's decisions:

- the remapper's table, its stall rule and slot locking;
- lowest-free allocation in the tracking table;
- the head/tail table indexed directly by compacted ID;
- no enqueue FIFO on the read side;
- the exact budget formula and its rounding, including the spare tick;
- the rule that write data goes to the subordinate only once its address
  is in the table;
- the abort order;
- the WAIT state that keeps the two guards' recoveries together;
- the register map and port;
- the error codes.

The sticky bits are modelled as per-event flags latched every cycle. The
description says only that a sticky bit keeps a near-timeout condition
recorded while the prescaler delays the counter.

Not built:

- the reset unit;
- the interconnect;
- the subordinate;
- the host SoC.

The testbench has behavioural models of a subordinate and a reset unit.
Silicon area figures cannot be reproduced here.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. To run one with plain
Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/tmu_pkg.sv tb/tb_tmu_top.sv --top-module tb_tmu_top
./obj_dir/Vtb_tmu_top
```

| testbench | what it checks |
|---|---|
| `tb_tmu_prescaler` | tick period and the clear input, for steps 1 and 4 |
| `tb_tmu_budget_alloc` | 2000 random configurations against the budget formula, for steps 1 and 32; the 320-cycle total of the Ethernet-sized write |
| `tb_tmu_ott` | random enqueue, dequeue and pop against a queue model; full-table refusal; clear |
| `tb_tmu_id_remap` | random traffic on 6 IDs through 4 slots: ID restore, per-ID limits, stalls, stable IDs while waiting |
| `tb_tmu_regs` | reset values, read/write, write-1-to-clear, counters, interrupt gating |
| `tb_tmu_write_guard` | see below |
| `tb_tmu_read_guard` | the same for reads, 8-beat bursts: 4 stall points, unrequested R, early `r_last`, and the beats returned by the abort |
| `tb_tmu_top` | see below |
| `tb_tmu_prescaler_sweep` | detection delay of a total data stall at prescaler steps 1, 8, 32 and 128, both flavours, with a 128-slot table filled to the last slot (table below) |
| `tb_tmu_ethernet` | six stall points of a 250-beat write, through four complete TMUs: Full-Counter and Tiny-Counter, each without and with a prescaler of 32 (table below) |

**`tb_tmu_write_guard`** runs four guards side by side on the same 250-beat
write: Full-Counter, Tiny-Counter, and each with a prescaler of 32. It
injects a stall in each of the six phases, an unrequested B and an early
`w_last`. For every guard it checks the error code, the phase and the
detection cycle, the single `SLVERR` B, and the reset handshake.

**`tb_tmu_top`** runs end to end at the default parameters. A pipelined
manager with 8 IDs drives the TMU, and a random-latency subordinate answers.
It runs:

- 400 random transfers and a 250-beat write and read;
- enough slow-response writes to fill all 16 slots;
- 14 injected faults, in the subordinate and in the manager;
- a fault under mixed load, where the other direction is aborted as well;
- a fault with recovery disabled;
- a programmed budget change.

It checks every response, every data beat, the interrupt, the error
registers and the reset handshakes. It counts each mechanism (table-full
stall, remapper stall, write and read faults, peer abort, reset, interrupt,
`SLVERR` responses, dropped write data) and fails if any of them never
occurred.

Each testbench was also run against one deliberately broken copy of its
module, and every one of them reported failures.

Detection delay for a burst stall in the 250-beat write, with the reset
budgets (burst budget 250 cycles, total 320):

| flavour | delay after the stalled phase or transaction started |
|---|---|
| Full-Counter | 251 cycles from the first beat |
| Tiny-Counter | 320 cycles from `aw_valid` |
| Full-Counter, step 32 | 259 cycles |
| Tiny-Counter, step 32 | 326 cycles |

`tb_tmu_ethernet` repeats this study through four complete TMUs at their
reset-value budgets: one of each flavour, and each of those again with a
prescaler step of 32. The subordinate runs at full speed, and the
fault-free write passes in all four. The interrupt comes after these
numbers of cycles:

| stall injected | Full-Counter | Tiny-Counter | Full-Counter, step 32 | Tiny-Counter, step 32 |
|---|---|---|---|---|
| `aw_valid` -> `aw_ready` | 12 | 322 | 39 | 327 |
| `aw_ready` -> first `w_valid` | 22 | 322 | 65 | 354 |
| first `w_valid` -> `w_ready` | 12 | 322 | 42 | 332 |
| first beat -> `w_last` | 252 | 322 | 268 | 334 |
| `w_last` -> `b_valid` | 22 | 322 | 52 | 335 |
| `b_valid` -> `b_ready` | 12 | 322 | 42 | 328 |

Without the prescaler, each number is its budget plus 2 cycles of
measurement offset. With it, the counter may start up to one step late
and holds one spare tick, so the test allows up to 2 steps plus 2 cycles
over the budget. One cycle
comes from the start being recorded as the manager raises valid. The other
comes from the interrupt register.

Stalls earlier in the transaction show a larger gap between the two
flavours.

Prescaler step against detection delay, for a write whose data never
comes. The table is sized for 128 outstanding writes (4 IDs x 32) and is
full. The budgets are 20 cycles for the stalled phase and 71 cycles for the
transaction:

| step | counter bits | Full-Counter | Tiny-Counter |
|---|---|---|---|
| 1 | 10 | 21 | 71 |
| 8 | 7 | 33 | 73 |
| 32 | 5 | 65 | 97 |
| 128 | 3 | 257 | 129 |

At large steps, rounding decides the delay. Every phase budget becomes at
least two ticks, so the phase counters lose their edge over the single
counter. Coarse steps therefore suit the Tiny-Counter better. An address-handshake stall, for example, is caught after 10
cycles by the Full-Counter and after 320 by the Tiny-Counter.

Limits of what was verified:

- The top-level test uses only the default configuration.
- The Tiny-Counter and the prescaled flavours go through `tmu_top` only in
  the Ethernet study; the random-traffic test covers the default
  configuration alone.
- The 128-entry table was simulated at guard level only.
