# DiaSys on-chip diagnosis: RTL

Tracing a multi-core chip produces more data than an off-chip link can carry
and more than a person can read. This design moves most of the analysis onto
the chip.

- **Event generators.** Small units sit next to each CPU. When a configured
  condition holds, such as "function `f` was entered" or "function `f`
  returned", they emit a short *event*.
- **Diagnosis processor.** Events travel over a dedicated on-chip network to
  this small processor. It runs user programs, called *transformation
  actors*, that filter, correlate and summarise the events.
- **Host.** Only the actors' conclusions, such as "a race condition just
  happened", leave the chip. They go to a host PC through the off-chip
  interface.

The observed CPUs are never stalled. When the diagnosis side cannot keep up,
it drops data and counts what it dropped.

This repository holds the synthesizable SystemVerilog for the diagnosis
extensions of a four-core system:

- four CPU event generators;
- one diagnosis processor tile: network adapter with DMA and hardware event
  queues, Wishbone bus and a 30 kB RAM;
- a 16-bit unidirectional ring network;
- an off-chip interface.

Some parts are not included:

- the observed multi-core system;
- the diagnosis processor's CPU core, an OpenRISC mor1kx in the original
  design;
- the USB 2.0 controller;
- the host software.

Where these parts would connect, their signals are ports of the top module
`diasys_top`.

```
        host (USB word streams)
              |
        +-----------+   ring: 0 -> 1 -> 2 -> 3 -> 4 -> 5 -> 0
        | offchip_if|  node 0
        +-----------+
              |
   +---------------------+      CPU trace   +---------------+
   |     diag_ring       |<---------------- | cpu_event_gen | nodes 2..5
   | 6 routers, 16 bit   |                  +---------------+ (one per CPU)
   +---------------------+
              |
   +---------------------------------------------+
   | diag_processor  (node 1)                    |
   |  dp_network_adapter -- wb_interconnect --+  |
   |   DMA, run/discard/TX queues,            |  |
   |   config regs                         dp_ram|
   |                     cpu_m2s/cpu_s2m (external CPU core)
   +---------------------------------------------+
```

## Events and packets

Everything on the diagnosis network is a packet of 16-bit flits. Each flit
travels with a `last` bit (`flit_t` in `diasys_pkg`). The first three flits
are always:

| flit | contents |
|------|----------|
| 0 | `[15:14]` class, `[13:8]` zero, `[7:0]` destination node |
| 1 | source node |
| 2 | event type (events) or register address (register packets) |

There are four classes:

| value | class |
|-------|-------|
| 0 | event |
| 1 | register read |
| 2 | register write |
| 3 | register read response |

An event packet from an event generator continues as follows:

- a 32-bit timestamp, high half first;
- 0 to 14 payload words of 32 bits, each as high half then low half.

An event with `n` payload words is therefore `5 + 2n` flits long.

The event type is `{source node[7:0], 3'b000, return flag, trigger index[3:0]}`.
It identifies the event generator, the trigger that fired, and whether the
event marks a function entry or a function return. An actor can therefore
dispatch on this one flit.

Node addresses are fixed at the top level:

| node | unit |
|------|------|
| 0 | off-chip interface (the host) |
| 1 | diagnosis processor |
| 2 + i | event generator of CPU i |

## The diagnosis ring (`diag_ring`, `ring_router`)

The ring has six routers. Router *i* feeds router *i+1*, and the last router
feeds router 0.

- **Routing.** A router compares the destination byte of the first flit with
  its own address. If it matches, the whole packet is ejected to the local
  port. Otherwise the packet is forwarded.
- **Arbitration.** Forwarded traffic and locally injected packets share the
  ring output. A packet-level round-robin arbiter (`noc_arbiter`) keeps the
  flits of a packet together (wormhole switching).
- **Buffering and timing.** Each router registers its output in a FIFO, so a
  flit takes one cycle per hop. All links use valid/ready handshakes.

**Deadlock.** A wormhole ring whose packets are longer than its buffers can
deadlock. Suppose every node injects a long packet at the same moment. Then
every router waits for the next one, and none of them can move. The routers
avoid this with the *bubble rule*:

- The output FIFO holds `2*MAX_PKT` flits.
- The head flit of a packet continuing around the ring may enter the FIFO
  only if `MAX_PKT` entries are free.
- The head flit of a newly injected packet may enter only if the FIFO is
  completely empty.

As a result, a packet that has started always finds space for its tail, and
injection can never fill the last packet-sized gap in the ring. Packets must
not exceed `MAX_PKT` = 64 flits.

The longest event has 33 flits and the longest register packet has 4. The
diagnosis processor may send packets of up to 64 flits.

## Configuration (`noc_config_if`)

Every node contains the same configuration module, with 16-bit registers
that can be read and written over the network:

| packet | flits |
|--------|-------|
| read | `{hdr(READ, node), requester, addr}` |
| write | `{hdr(WRITE, node), requester, addr, data}` |
| read response | `{hdr(RESP, requester), node, addr, data}` |

A read is answered with a read response. Writes are not acknowledged. A host
that needs confirmation reads the register back.

The module's receive side stalls only while it sends a response. In each
node, the response shares the outgoing link with the node's own traffic
through a packet arbiter.

## CPU event generator (`cpu_event_gen`)

The event generator watches one bundle of CPU signals per cycle
(`cpu_trace_t`):

- the executed PC and instruction word (`valid`, `pc`, `insn`);
- the register-file writeback port (`wb_en`, `wb_reg`, `wb_data`).

It has four parts.

**Trigger unit (`eg_trigger`).** It holds twelve PC comparators. Each
trigger has a `call_en` bit and a `ret_en` bit.

- **Entry events.** With `call_en` set, reaching the PC emits an entry event.
- **Return events.** With `ret_en` set, reaching the PC pushes the current
  link register (R9) and the trigger index onto a return address stack of 16
  entries.
  - When the CPU later executes the address on top of the stack, the entry is
    popped and a return event is emitted for that trigger.
  - So a single trigger on a function's first instruction catches every
    return from it, whatever the call site or the exit path.
  - Recursion works up to the stack depth.

Limits and collisions:

- Only one event can leave per cycle.
- When a return and an entry collide in the same cycle, the return wins and
  the lost event is counted. Among simultaneous entries, the lowest trigger
  index wins.
- A push into a full stack is discarded and counted.

**State capture (`eg_state_capture`).**

- *Register copy.* A shadow copy of the 32 registers is kept up to date from
  the writeback port. R0 stays zero.
- *Stack copy.* The OpenRISC calling convention passes extra arguments on
  the stack. The unit therefore copies every `l.sw I(r1), rB` with `I >= 0`
  into an 8-word image of the caller's frame. The copied word is `rB`'s
  value, including a writeback to `rB` in the same cycle.

**Snapshot correlation (`eg_snapshot`).** When a trigger fires, one
snapshot is latched. It holds:

- the event type;
- the 32-bit cycle counter;
- the payload that the trigger's PAYLOAD register selects: `gpr_cnt`
  registers starting at `gpr_first`, then `stk_cnt` stack words.

There is a single snapshot buffer. While it is occupied, new triggers are
dropped and counted, and the CPU is never held.

An event of `n` words occupies the buffer for `5 + 2n` cycles on an idle
network. Events closer together than that are lost. The host can read the
count of lost events (register 3).

**Packetizer (`eg_packetizer`).** It sends the snapshot as one packet, one
flit per cycle. The first flit leaves two cycles after the triggering
instruction.

**Register map** (16-bit registers, addresses as flit 2 of a register packet):

| address | register |
|---------|----------|
| 0 | module type (1 = event generator) |
| 1 | version |
| 2 | EVENT_DEST: node that receives the events |
| 3 | events lost to overload |
| 4 | return-stack overflows |
| 0x100 + 4i + 0 | trigger i CTRL: bit 2 `ret_bare` (return event without payload), bit 1 `ret_en`, bit 0 `call_en` |
| 0x100 + 4i + 1 / + 2 | trigger i PC[15:0] / PC[31:16] |
| 0x100 + 4i + 3 | trigger i PAYLOAD: `[10:8]` stack words, `[7:5]` registers, `[4:0]` first register |

## Diagnosis processor (`diag_processor`)

The tile has three parts:

- a network adapter (`dp_network_adapter`);
- a two-master, two-slave Wishbone bus (`wb_interconnect`);
- 7680 words of RAM (`dp_ram`, 30 kB).

The CPU core attaches through `cpu_m2s`/`cpu_s2m`. The network adapter's job
is to ensure that the CPU never copies an event and never waits for one.

**DMA into event slots.** The top of RAM (from byte address 0x7000) is
divided into 16 slots of 32 words.

- When the first flit of an event arrives, the adapter claims a free slot.
- As the flits arrive, it writes them into the slot two per word, the
  earlier flit in bits 31:16.
- After the last flit, it writes the flit count into word 0 and appends the
  slot address to the *run queue*.
- Flits that do not fit (beyond 62) are not stored, but they are counted in
  the length.
- If no slot is free, the whole packet is discarded and counted.

**Run-to-completion queues.** The CPU sees four registers at 0x8000_0000:

| offset | name | access |
|--------|------|--------|
| 0x0 | RUNQ | read: address of the next event, 0 if none. The read removes it. |
| 0x4 | DISCARDQ | write: address of a finished event. The slot becomes free. Invalid addresses are ignored. |
| 0x8 | TX | write `{last[16], flit[15:0]}`: queue one flit for the network. Stalls while the 32-entry queue is full. |
| 0xC | STATUS | read: `{packets dropped, free slots}` |

An actor is thus a plain loop: poll RUNQ, read the event from RAM, compute,
write any output event flit by flit into TX, then write the address to
DISCARDQ. No interrupts are involved.

The adapter's configuration registers, readable over the network, are:

| register | contents |
|----------|----------|
| 0 | module type (2) |
| 1 | version |
| 2 | dropped packets |
| 3 | free slots |

**Bus.**

- The DMA is master 0 and the CPU is master 1.
- Address bit 31 selects the adapter registers; all other addresses go to
  RAM.
- Arbitration is round robin, and a master keeps the bus while it holds
  `cyc`.
- RAM and registers acknowledge one cycle after the strobe.

## Off-chip interface (`offchip_if`)

The host link is modelled as two 16-bit word streams with valid/ready, which
is what a USB 2.0 FIFO bridge chip offers.

- **Both directions.** A packet is framed as a length word followed by that
  many flits.
- **Host to chip.** Words are forwarded as they arrive. A zero length is
  ignored.
- **Chip to host.** Each packet is buffered whole (up to 64 flits) before its
  length is known and sent.

## Example: checking a transaction for atomicity

`tb_diasys_top` runs the following scenario end to end.

- **Application.** Core 0 runs a `bank` task. `get_balance(src)` and
  `set_balance(src)` are called on behalf of two clients. Sometimes the
  read-modify-write sequences of the two clients interleave.
- **Configuration.** The host sets up event generator 0 over the off-chip
  link:
  - trigger 0 emits an entry event at `get_balance` with R3, the client, as
    payload;
  - trigger 1 emits a return event when `set_balance` returns. Its payload is
    stack word 0, where the function spilled its argument, because R3 has
    been overwritten by then.
  - Both events go to node 1.
- **Actor.** A bus-master model of the diagnosis processor's CPU runs the
  checking actor:
  - it remembers which client owns the open transaction;
  - when another client's event arrives inside that transaction, it sends a
    three-flit "race detected" event to the host.
- **Overload.** At the same time, core 3 hits a 14-word trigger every other
  cycle, with its events sent to the host. This overloads its event
  generator. The host reads back how many events were lost, and the test
  checks that delivered plus lost events equal the triggers.

The actor clears its transaction when the owner's `set_balance` returns.
Without that step, every later transaction of the other client would be
reported as a race.

## Example: a lock contention profile

`tb_lock_profile` builds a profile of how long threads wait for mutexes,
running on all four cores.

- **Triggers.** Each event generator has a single trigger on the first
  instruction of the lock function, with both `call_en` and `ret_en` set.
  - The entry event carries R3, the mutex address.
  - The return event is matched through the return address stack. It is
    sent without payload (`ret_bare`), as only its timestamp matters.
- **Actors.** The model of the diagnosis processor's CPU chains two actors:
  1. The first pairs each core's entry and return events and subtracts their
     timestamps, giving the lock acquisition time in cycles.
  2. The second accumulates, per mutex, the number of calls and the total
     time.
- **Output.** At the end, one six-flit line per mutex goes to the host. The
  whole profile leaves the chip in a handful of packets, however many lock
  calls were observed.

The test compares each line with the times implied by the driven program.
It also checks that no event was lost.

Each call spends at least 12 cycles in the lock function, because of the
single snapshot buffer. A return that comes before the entry event's 7 flits have left
would be dropped and counted, which matches the overload policy.

## Parameters

All defaults are the sizes of the four-core prototype.

| module | parameter | default | origin |
|--------|-----------|---------|--------|
| `diasys_top` | `NUM_CPUS` | 4 | four CPUs observed |
| `diag_ring` | `NODES` | 6 | 4 event generators, diagnosis processor, off-chip |
| `diag_ring`, `ring_router` | `MAX_PKT` | 64 | this design (bubble rule) |
| `cpu_event_gen`, `eg_trigger` | `NUM_TRIGGERS` | 12 | twelve trigger conditions per CPU |
| `eg_trigger` | `RAS_DEPTH` | 16 | this design |
| `eg_state_capture` | `STACK_WORDS` | 8 | this design |
| `dp_ram`, `diag_processor` | `WORDS` / `RAM_WORDS` | 7680 | 30 kB SRAM |
| `dp_network_adapter` | `NUM_SLOTS`, `SLOT_WORDS` | 16, 32 | this design |
| `dp_network_adapter` | `SLOT_BASE` | 0x7000 | this design |
| `dp_network_adapter` | `TX_DEPTH` | 32 | this design |
| `offchip_if` | `MAX_PKT` | 64 | this design |

The flit width (16 bits), the ring topology and the node count, the twelve
triggers, the return-address-stack mechanism, the register and stack
argument capture, the DMA with run and discard queues, and the RAM size
follow the original description. The following are choices of this RTL:

- packet and register formats;
- all register maps;
- router internals and the bubble rule;
- the single-buffered snapshot;
- stack depth and slot sizes;
- host framing.

## How far it goes

**Not built.** The following parts are absent:

- the mor1kx CPU of the diagnosis processor;
- the USB controller and PHY;
- the observed four-core system;
- the host runtime.

Actors are therefore exercised by testbench bus masters that follow the
software contract above, not by compiled C code. The reduced "lite" event
generator variant (PC triggers only) is also not built. The full variant
covers its function.

**Not modelled.** Timestamps are 32-bit cycle counts, local to each event
generator. They are not synchronised between event generators.

**Payload on return events.** A trigger's payload selection applies to both
its entry and its return events. The exception is when CTRL bit `ret_bare`
is set: the return event then carries only its type and timestamp, a 5-flit
packet. The lock profile uses this option. The race check does not, because
its return event needs the spilled argument.

**Size.** The full top synthesises to roughly 10,300 flip-flop bits plus
about 263 kbit of memory arrays:

- the diagnosis processor's 30 kB RAM;
- the six ring output FIFOs;
- the off-chip packet buffer.

## Verification

Each block has a self-checking testbench in `tb/`. Each testbench ends with
a line `TB_RESULT checks=N failures=M`, and each has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_eg_trigger` | PC matches, call and return events, nested and recursive calls, stack overflow, collisions |
| `tb_eg_state_capture` | register copy against a shadow model; stack copy only for `l.sw` through R1 with non-negative offsets; bypass |
| `tb_eg_snapshot` | payload selection for random configurations; drop while busy |
| `tb_eg_packetizer` | flit layout for random snapshots; the `5 + 2n` cycle count; back-pressure |
| `tb_cpu_event_gen` | the complete unit: configuration over the network, entry and return events with register and stack payloads, timestamps, the drop counter under a stalled network |
| `tb_noc_config_if` | random reads and writes, foreign packet classes, stalled responses |
| `tb_diag_ring` | all-to-all random traffic with random back-pressure (order and integrity per source); hop latency |
| `tb_dp_ram` | byte-select writes, read-back, out-of-range reads |
| `tb_wb_interconnect` | two concurrent masters against RAM and a slow slave |
| `tb_dp_network_adapter` | DMA slot contents (including truncation), run-queue order, overload drops, invalid discards, the TX path, configuration |
| `tb_diag_processor` | a complete actor loop over 40 events on the real bus and RAM |
| `tb_offchip_if` | both directions with random framing and back-pressure |
| `tb_diasys_top` | the end-to-end scenario above at default parameters. It counts configuration writes and reads, call and return triggers, stack capture, DMA and slot reuse, race reports, host events, overload drops and ring back-pressure, and fails if any of them never happened. |

`tb_lock_profile` also runs the whole design at default parameters, with the
profile workload described above.

Three modules contain concurrent assertions, which are active in simulation
with `--assert`:

- `wb_interconnect`: one slave per cycle; a request is held until it is
  acknowledged.
- `eg_packetizer`: an offered flit stays stable until it is taken.
- `dp_network_adapter`: the run queue has room; the DMA holds its write.

The simulations use Verilator 5 with timing support. For example:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
  rtl/diasys_pkg.sv tb/tb_diasys_top.sv --top-module tb_diasys_top -o sim
./obj_dir/sim
```

Replace `tb_diasys_top` with any other testbench name. The end-to-end test
runs in a few seconds.
