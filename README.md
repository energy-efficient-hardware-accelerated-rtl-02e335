# A synchronization and communication unit for shared-L1 processor clusters

Small processor clusters share one L1 memory between eight or so simple in-order
cores. They split a kernel into many short parallel pieces, and each piece ends
at a barrier or a critical section. Done in software, a barrier or lock is a
spin loop on a shared variable. The cores keep their clocks running, hammer the
same memory bank, and pay tens to hundreds of cycles per synchronization point.
That makes fine-grained parallelism too expensive in both time and energy.

The unit described here, the SCU (synchronization and communication unit),
turns every synchronization point into **one load instruction per core**. Each
core has a private, single-cycle link to its own slice of the SCU. A special
load, `elw` (event-load-word), to an address in that slice does three things:

1. its address tells an SCU extension what happened, e.g. "core 3 arrived at
   barrier 0" or "core 3 wants mutex 0";
2. if the event the core waits for is not there yet, the SCU withholds the
   grant of the load, the in-order pipeline stalls on it, and the SCU switches
   off the core's clock;
3. when the event arrives, the SCU re-enables the clock and grants the load in
   the same cycle. The load's data then tells the core why it woke up, or
   carries a message from another core.

No shared variable is touched, no core polls, and a sleeping core costs only
its clock gate's leakage. A barrier costs the same few cycles whether 2 or 8
cores take part, because all cores reach the barrier logic in parallel over
their own links.

The RTL here is the SCU together with the per-core data demultiplexers that
create the private links. The cores, the L1 memory and the interconnects belong
to the host cluster; they connect through the top-level ports of `scu_top`.

## Structure

```
            core 0 data port            core NC-1 data port
                  |                            |
           core_data_demux   ...        core_data_demux
           /      |      \                /     |     \
        TCDM  peripheral  private      TCDM  periph.  private
              interconn.   link                       link
                  |          |                          |
   shared port ---+    scu_base_unit 0   ...   scu_base_unit NC-1
        |                 | triggers  ^ event lines      |
 scu_periph_decoder ------+-----------+------------------+
        |                 |
        +-- scu_notifier (8 events, any core -> any set of cores)
        +-- scu_barrier  x NB (worker set -> target set)
        +-- scu_mutex    x NMX (lock election + 32-bit message)
        +-- scu_event_fifo (external events over an asynchronous 8-bit bus)
```

| File | Content |
|---|---|
| `rtl/scu_pkg.sv` | widths, event-line assignment, address maps, link structs, FSM states |
| `rtl/scu_base_unit.sv` | per-core event buffer, masks, FSM, clock enable, interrupts, extension triggers |
| `rtl/scu_notifier.sv` | notifier extension |
| `rtl/scu_barrier.sv` | one barrier extension |
| `rtl/scu_mutex.sv` | one mutex extension |
| `rtl/scu_event_fifo.sv` | external event FIFO with its asynchronous bus |
| `rtl/scu_periph_decoder.sv` | decoder of the SCU's port on the peripheral interconnect |
| `rtl/core_data_demux.sv` | per-core split of the data port: TCDM, peripherals, private SCU link |
| `rtl/scu_top.sv` | everything above, wired for NC cores |

Default size: 8 cores, 4 barriers, 1 mutex, an 8-entry event FIFO and a
64 KiB TCDM address range. This is the configuration of the cluster the unit
was designed for. `NC` may range up to 16: the shared port has 16 base-unit
windows. `NB` and `NMX` up to 16 each, limited by the 4-bit instance field of
the private addresses.

## The base unit: sleeping on a load

Each core owns one `scu_base_unit`. It holds:

- **event buffer** (32 bits): bit *i* is set whenever event line *i* is high,
  so every event line is level-sensitive, and a one-cycle pulse is remembered.
  Bits are cleared by software (`BUFFER_CLEAR`), by the auto-clear of a wait,
  or by an interrupt acknowledge. An event arriving in the same cycle as a
  clear wins.
- **event mask**: which buffer bits may end a wait.
- **interrupt mask**: which buffer bits raise an interrupt. The two masks share
  the one buffer.
- **the control FSM**, with three states:

| State | Meaning | Leaves when |
|---|---|---|
| ACTIVE | core runs; accesses are granted at once | a wait access finds no enabled event → SLEEP |
| SLEEP | wait access held without grant; clock gated once the core drops busy | enabled event → grant, ACTIVE; enabled interrupt → IRQ; request withdrawn → ACTIVE |
| IRQ | core woken to run an interrupt handler | the handler's re-executed wait finds an event → grant, ACTIVE; finds none and no interrupt left → SLEEP |

The clock enable is high unless the unit is asleep. It also stays high while
the core still reports busy, or an event or interrupt is already pending. The
core is expected to drop `core_busy_i` when the stalled access is an `elw`;
that is the only change the core needs.

**Timing of a wake-up.** An event line rises in cycle *t*. The buffer holds it
at *t+1*, and in that same cycle the clock enable rises and the grant is given.
The answer (`rvalid` with data) follows at *t+2*. A wait that finds its event
already buffered is granted at once and the clock is never gated. This is what
the last core to reach a barrier sees.

**Trigger once.** The address of a private access selects an extension action.
That action fires in the first cycle of the access only, even though a wait
may stay ungranted for thousands of cycles.

**Auto-clear.** A wait to a "wait and clear" address reports the masked buffer
in its answer. In the answer cycle it then clears exactly the bits it reported,
so the next wait starts clean without an extra store.

**Interrupts.** The lowest pending enabled interrupt line is offered on
`irq_req_o`/`irq_id_o`; the identifier is 5 bits, one per event line. The core
acknowledges with `irq_ack_i`/`irq_ack_id_i` on entering the handler, which
clears that bit of the buffer. If the interrupt arrives while the core sleeps,
the core must give up its stalled `elw`, run the handler and then execute the
same `elw` again. The base unit remembers the address of the wait that put the
core to sleep. A wait to that address in the IRQ state therefore does not
trigger its extension a second time, so a core is never counted twice at a
barrier or queued twice at a mutex.

## Extensions

**Notifier.** There are eight notifier events. Any core (over its private link)
or any master on the shared port can fire event *k* for any set of cores,
itself included. A write carries the target set in its data. A read-triggered
notifier takes its targets from the base unit's `NOTIF_TARGET` register. An
empty set means all cores. All NC+1 sources are OR-combined, and each target
gets a one-cycle pulse on its event line *k* one cycle later.

**Barrier.** Each barrier has a *worker* mask, a *target* mask and an arrival
*status*. A core arrives by any access to its barrier address, with or without
waiting. When the status covers all workers, every target core gets a
one-cycle event in the next cycle and the status clears, ready for the next
round. Workers and targets may differ. For example, four producer cores can
release four consumer cores that simply wait on the same barrier. The events
of all NB barriers are OR-combined into one event line per core, since a core
waits at one barrier at a time.

**Mutex.** A lock is a wait access to the mutex address. The mutex records all
pending lock requests and elects one of them by sending an event to that core
only. Elections go round-robin, starting after the previous owner. The owner
releases the mutex by writing to the same address. The written word is a
**message** that the next owner receives as the data of its lock load, so
passing a pointer or a count along a queue of cores costs nothing extra. Only
the owner's write releases the mutex; a release and the next election happen in
the same cycle.

**Event FIFO.** Masters outside the cluster (chip peripherals, a control core)
post events by sending an 8-bit identifier over an asynchronous request/grant
bus, with a four-phase handshake and bundled data. A two-flop synchronizer
brings in the request. When the FIFO is full, the grant is held back, so the
sender waits and no event is lost. While the FIFO is not empty, event line 10
is high in every base unit. Normally one core enables it as an interrupt, and
its handler pops the entries by reading the FIFO through the shared port.

## Two ways in: the private links and the shared port

Each `core_data_demux` sends a core access to the TCDM interconnect, the
peripheral interconnect or the private SCU link, decided by its address alone.
The demux is combinational, so the private link is as fast as a TCDM access:
granted in the request cycle, answered in the next.

Because every core has its own link, all cores use the **same** addresses for
their own base unit (an aliased window of 1 KiB at `SCU_BASE`), and
synchronization code needs no core-ID arithmetic.

Private window, byte offset `addr[9:0]`:

| `addr[9:8]` | region | remaining bits |
|---|---|---|
| 0 | base-unit registers | `addr[7:2]` register index |
| 1 | notifier | `addr[7:6]` mode, `addr[5:2]` event number |
| 2 | barrier | `addr[7:6]` mode, `addr[5:2]` barrier |
| 3 | mutex | `addr[7:6]` mode, `addr[5:2]` mutex |

Modes: 0 trigger only, 1 trigger and wait, 2 trigger, wait and auto-clear.
Mode 3 behaves as 0. A write in the mutex region is an unlock.

| Index | Register |
|---|---|
| 0 / 1 / 2 | event mask: write, clear bits, set bits |
| 3 / 4 / 5 | interrupt mask: write, clear bits, set bits |
| 6 | status: `{state, clock_en}` |
| 7 | event buffer |
| 8 | buffer & event mask |
| 9 | buffer & interrupt mask |
| 10 | write: clear buffer bits |
| 11 | target mask of read-triggered notifiers |
| 14 | wait for any enabled event |
| 15 | wait for any enabled event, then clear |

The **shared port** is an ordinary slave on the peripheral interconnect, with a
16-bit offset. It gives the global, non-aliased view, for debugging and for
masters outside the cluster, and it holds what has no private-link access:

| `addr[15:14]` | target |
|---|---|
| 0 | base unit `addr[13:10]`, registers as above (a wait never sleeps here) |
| 1, `addr[11:10]`=0 | notifier: write fires event `addr[4:2]` for the cores in `wdata` (0 = all) |
| 1, `addr[11:10]`=1 | barrier `addr[7:4]`: `addr[3:2]` 0 worker mask, 1 target mask, 2 status (read) or arrival of the cores in `wdata` (write) |
| 1, `addr[11:10]`=2 | event FIFO: read pops, returns `{valid, 23'b0, id}` |

The defaults put the TCDM at `0x1000_0000` and the shared port at
`0x1020_0000`. The private window is at `0x1020_C000`, which the shared map
leaves unused, so a core can still reach every shared-port function.

## Event lines

| Bit | Source |
|---|---|
| 7:0 | notifier events 0–7 |
| 8 | any barrier that has this core as a target |
| 9 | a mutex elected this core |
| 10 | event FIFO not empty |
| 31:11 | cluster event lines from outside (`cluster_evt_i`, 21 per core: DMA, timer, accelerators) |

## Using it

With the event mask set once, each primitive is a single instruction
(addresses relative to `SCU_BASE`):

```
barrier b (arrive, sleep, wake, clear):   elw  x, 0x200 | 0x80 | b<<2
lock mutex m (message arrives in x):      elw  x, 0x300 | 0x80 | m<<2
unlock mutex m with message y:            sw   y, 0x300 | m<<2
notify cores in mask y with event k:      sw   y, 0x100 | k<<2
wait for any enabled event, then clear:   elw  x, 0x03C
```

The barrier is configured once through the shared port: worker and target
masks.

## Cycle behaviour

Measured in the end-to-end testbench, in cycles of the cluster clock:

- A private access is granted in its request cycle and answered one cycle
  later.
- A barrier's last arriving core gets its answer 3 cycles after it presents its
  `elw`, a 4-cycle access, and every waiting core is answered in that same
  cycle. The count does not depend on how many cores take part: the arrival
  masks are wide OR gates, not a shared counter.
- A waiting core needs 1 cycle from event to grant and one more to the answer.
- A mutex handover takes 3 cycles from the owner's unlock store to the next
  owner's answer: release and election in one cycle, event buffered, then
  grant and answer.
- An external event is in the FIFO 2 cycles after its request rises, and its
  event line is high one cycle after that.

`tb/tb_scu_synth.sv` runs the two standard micro-benchmarks on 2, 4 and 8
cores, each as 8 loop passes of 32 primitives. Its cores issue the next access
in the cycle after the previous answer:

| Benchmark | 2 cores | 4 cores | 8 cores |
|---|---|---|---|
| barrier: cycles per barrier | 4 | 4 | 4 |
| barrier: clock-enabled cycles per core and barrier | 3 | 3 | 3 |
| 5-cycle critical section: cycles per loop pass (all cores once) | 18 | 36 | 72 |
| 10-cycle critical section: cycles per loop pass | 28 | 56 | 112 |

The barrier cost does not grow with the core count. A critical section costs
its own length plus 4 cycles at any core count: 2 for the unlock store and 2
for the event to reach the next owner.

The original evaluation ran real cores with compiled code. It reports 6
core-active cycles per barrier at every core count, and 12/23/44 (5-cycle) and
13/24/50 (10-cycle) cycles for the critical sections on 2/4/8 cores. Those
counts include the core pipeline and the compiled loop around each access,
which are not part of this RTL. The critical-section figures also imply a
hand-over cost below one cycle per core. This RTL's fixed four cycles do not
reach that, and the published text gives no mechanism that would.

## Departures from the published description

- The published text gives the private window as "1 Kibit". This design uses
  a 1 KiB window of byte addresses, 10 address bits.
- Address maps, register indices, the event-line assignment, the interrupt
  priority (lowest line first), round-robin mutex election and the answer
  format of the FIFO are this design's own choices; they are not specified
  there.
- The FIFO depth (8) and the bus handshake (four-phase with a two-flop
  synchronizer) are not given there.
- The barrier status clears on release, and a worker mask of zero never
  releases. Unlocks by a core that does not own the mutex are ignored. These
  are own choices.
- How a core abandons its stalled `elw` when it takes an interrupt is not
  described. Here the core simply drops the request; an assertion in the base
  unit allows this only when an interrupt is pending.
- The barrier and FIFO extensions are configured and read through the shared
  port only.
- The cores, the TCDM and the interconnects are outside this RTL. The
  testbenches model them behaviourally.

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The end-to-end testbench `tb/tb_scu_top.sv`
runs the unit at its default size. Around it sit eight behavioural cores (with
`elw`, busy release and interrupt handling), a single-cycle TCDM and a
peripheral interconnect. It checks barriers (including the 4-cycle access and
simultaneous release), a sub-team barrier, mutually exclusive
read-modify-write critical sections with message passing, notifier and
broadcast wake-ups, a self-notification granted at once, a cluster event, and
external events handled by an interrupt while the core sleeps. It counts every
mechanism and fails one that never occurred.

With Verilator 5:

```
verilator --binary --timing --assert --top-module tb_scu_top -Mdir obj \
    rtl/scu_pkg.sv rtl/scu_notifier.sv rtl/scu_barrier.sv rtl/scu_mutex.sv \
    rtl/scu_event_fifo.sv rtl/scu_base_unit.sv rtl/scu_periph_decoder.sv \
    rtl/core_data_demux.sv rtl/scu_top.sv tb/tb_scu_top.sv
./obj/Vtb_scu_top
```

`tb/tb_scu_synth.sv` (the benchmarks above) builds from the same file list.
A block testbench needs only `rtl/scu_pkg.sv`, the block and its testbench,
for example `tb/tb_scu_mutex.sv` with `rtl/scu_mutex.sv`.
