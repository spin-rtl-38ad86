# A sPIN network interface in SystemVerilog

sPIN ("streaming processing in the network") lets an application run its
own small functions on the network card. These functions are handlers. They
run on each packet of an incoming message while the rest of the message is
still on the wire. The application attaches three handlers to a receive
buffer:

- a **header handler** runs once per message, on the first packet;
- a **payload handler** runs on every packet that carries data;
- a **completion handler** runs once, after every byte of the message has
  been dealt with.

With these a card can answer a message without involving the host. It can
also fold incoming data into host memory (for example, add it to what is
there), or scatter data into a strided layout. It can also forward packets
to other nodes, as in a broadcast tree.

This RTL is the runtime that makes this happen on the card:

- it stores packets and finds out which message and which buffer each one
  belongs to;
- it starts the handlers on a pool of handler processing units (HPUs) in
  the right order;
- it gives the handlers shared memory, DMA to and from the host, host-side
  atomics, counters and a way to send packets;
- it reports completions, errors and flow-control events to the host.

The HPU cores are not included. Any small core that follows the task
handshake described below can be attached.

The design follows the sPIN proposal of Hoefler, Di Girolamo, Taranov,
Grant and Brightwell (SC'17), which extends Portals 4. The proposal
describes the mechanisms and a few timings. Most of the microarchitecture
here is this design's own; the last section lists where it departs from the
proposal or goes beyond it.

## Block structure

```
 rx beats ──► ingress ──► packet buffer slots (in hpu_mem)
                 │ descriptor
                 ▼
            pkt_scheduler ◄──► me_table     (header packets, 75 cycles)
                 │       ◄──► channel_cam  (other packets, 5 cycles)
   task/return  │  deposit
   ┌────────────┼────────────┐
   ▼            ▼            ▼
 HPU 0..3 ──► hpu_mem ◄── dma_unit ◄──► host link
   │  │                      ▲
   │  └──────── ct_unit      │ (deposits, handler DMA, host atomics)
   └──────────► put_unit ──► tx beats / host send queue
 events ──► event queue (sync_fifo) ──► host
```

| Module | Role |
|---|---|
| `spin_pkg` | Shared types: packet header, matching entry (ME), return codes, and the request formats of the memory, DMA, counter and put ports |
| `spin_nic` | Top level. It wires the blocks together and brings the HPU, host and network sides out as ports |
| `ingress` | Writes each arriving packet into a free 4 KiB slot of the packet buffer, then hands a descriptor to the scheduler |
| `me_table` | List of matching entries; a 64-bit masked match with the first entry winning |
| `channel_cam` | Maps {sender, message number} to an open message channel |
| `pkt_scheduler` | The sPIN runtime: handler ordering, return codes, default deposit, dropped bytes, flow control, events |
| `hpu_mem` | Shared, banked, single-cycle memory with compare-and-swap and fetch-and-add |
| `dma_unit` | HPU memory ↔ host memory transfers, host compare-and-swap and fetch-and-add, many word requests in flight |
| `dma_xlate` | Per HPU: turns a handler's (space, offset) DMA call into a host address and refuses calls past the end of the space |
| `ct_unit` | Counting events: increment, get and set from handlers, increment on message completion, host read and set |
| `put_unit` | Handler sends: one packet from HPU memory (put from device), or a command to the ordinary send queue (put from host) |
| `sync_fifo`, `rr_arbiter` | Helpers; the event queue is a `sync_fifo` |

Default sizes are in `spin_pkg`:

| Parameter | Value | Origin |
|---|---|---|
| HPUs | 4 | the proposal's simulated card |
| Largest packet | 4 KiB | the proposal's MTU |
| Header match time | 75 cycles | 30 ns at 2.5 GHz, from the proposal |
| Channel lookup time | 5 cycles | 2 ns at 2.5 GHz, from the proposal |
| Buffer slots | 8 | this design; 32 KiB, above the proposal's 25 kB estimate of the buffering needed |
| MEs | 64 | this design |
| Channels | 16 | this design |
| Portal entries | 4 | this design |
| Counters | 16 | this design |
| HPU memory | 64 KiB in 8 banks | this design |
| Data word | 64 bit | this design |

## How a message is processed

### Finding the message

A packet is written into a buffer slot one 64-bit beat per cycle. Its
descriptor then reaches the scheduler.

The first packet of a message has `is_header` set. It is matched against
the ME list: same portal index, and equal match bits wherever the ME's
ignore mask is clear. The lowest-numbered matching ME wins. The match takes
75 cycles.

On a hit, a channel is opened in the CAM under the key {source_id, msg_id}.
The scheduler then keeps per-message state for that channel:

- the phase;
- the bytes accounted for so far;
- the bytes dropped;
- the number of handlers and deposits still running;
- the flow-control and error flags.

Every later packet of the message finds its channel in the CAM in 5 cycles.
A packet whose message is unknown is dropped and counted in `orphan_drops`.
This includes a packet that arrives before its header packet. A header
packet that matches no ME produces a "no match" event.

### Handler order

The per-message phase decides what happens to each packet.

1. **Header phase.** The header handler runs alone. Payload packets that
   arrive meanwhile are *parked* in their slots. A background scan releases
   them once the header handler has returned.
2. **The header handler's return code** picks the next phase:
   - `PROCESS_DATA`: every data packet, including the header packet's
     payload after the user header, goes to a payload handler. Payload
     handlers of one message run on several HPUs at once, in any order.
   - `PROCEED`: no more handlers run. Every packet is deposited by DMA at
     the ME's host address plus the message offset plus the packet's offset.
   - `DROP`: every packet is discarded, and its payload bytes are added to
     the message's dropped-byte count.
   - The `_PENDING` variants do the same, but leave the ME in the list after
     the message.
3. **Completion.** The message completes when its accounted bytes reach its
   length and nothing is running. The completion handler then runs, and
   receives the dropped-byte count and the flow-control flag. After it
   returns:
   - a completion event is posted;
   - the ME's counter is incremented;
   - the channel is closed;
   - the ME is unlinked, unless a `PENDING` code was returned.

   After `PROCEED` the completion handler is skipped, because that code
   means "no further handlers".

An ME without a header handler starts directly in the data phase. An ME
without a payload handler deposits its packets like `PROCEED`. A handler
that returns `FAIL` or `SEGV` posts an error event, only the first one per
message. The completion event then carries that code. When the failing
handler is also the message's last, the completion event is the only
report: one event per step. A failed header
handler counts as `DROP`.

The scheduler applies exactly one change of state per cycle, in a fixed
order:

1. a returning handler;
2. a finished deposit;
3. the newly looked-up packet;
4. one step of the parked-packet scan.

This keeps the per-message bookkeeping free of races. A task is issued to
the lowest idle HPU in the cycle after it was queued. With the 75-cycle
match, a 4 KiB header packet's handler starts 512 + 75 + a few cycles after
its first beat. The end-to-end test checks that bound.

### Flow control

A packet is refused when no buffer slot is free. The refused packet's
portal entry goes into flow control:

- an event is posted;
- the bit in `pt_fc` is set;
- every later packet on that entry is dropped.

The dropped bytes count towards their message, so the message still
completes. Its completion handler sees `fc_triggered` set and the number
of lost bytes. The host clears the state with a pulse on `pt_enable`.

## The HPU side

The HPUs are not built here. `spin_nic` gives each HPU *h* these ports:

- **Task**: `hpu_start[h]` pulses with `hpu_task[h]`, which carries:
  - the handler kind and its entry point (`pc`);
  - the ME index and the address of the handler state;
  - the packet's word address in the buffer, its length and its message
    offset;
  - the header (header handler only);
  - the dropped bytes and the flow-control flag (completion handler only).

  When finished, the HPU holds `hpu_done[h]` with `hpu_rc[h]` until
  `hpu_ack[h]`.
- **Memory** (`hpu_mem_*`): hold the request until granted; data comes one
  cycle later. Read, write, CAS and fetch-add are supported. Each bank
  serves one port per cycle, so accesses that collide wait.
- **DMA** (`hpu_dma_*`): hold the command until ready. A handler does not
  name a host address. It gives an offset into one of two spaces: its ME's
  host buffer or the handler host memory. The bases and lengths of both
  come from the ME when the handler is dispatched. A call that would reach
  past the end of its space is not issued. It ends at once with
  `hpu_dma_fault`, and the handler is expected to return `SEGV`.
  Otherwise a done pulse with the command's tag follows when the last host
  answer arrives. For host
  CAS and fetch-add it also returns the old host value.
- **Counters** (`hpu_ct_*`): hold the request until granted. The value
  before the operation follows one cycle later.
- **Put** (`hpu_put_*`): hold the command until `hpu_put_done`.
  - A put from device is one packet of at most 4 KiB, built from HPU memory
    and sent on `tx_*`. Done means the last beat has left, so the handler
    blocks until then.
  - A put from host is handed to the card's ordinary send queue on `hsq_*`
    and is done as soon as it is queued.

The host side has:

- a memory port into `hpu_mem`, to upload handler state;
- a write port for MEs;
- the event queue;
- counter read and set;
- the `pt_enable` bits.

The DMA unit reaches host memory through a plain in-order request/response
port (`host_req`, `host_rsp_*`). It keeps up to 1024 word requests in
flight, so a long transfer streams at one word per cycle despite a latency
of hundreds of cycles.

## Simulating

Every block has a self-checking testbench `tb/tb_<block>.sv`. Each one
prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog if
it hangs. With Verilator 5:

```
verilator --binary --timing --assert -y rtl rtl/spin_pkg.sv tb/tb_spin_nic.sv \
          --top-module tb_spin_nic -o sim
obj_dir/sim +verilator+rand+reset+2
```

The package is named first, and the other modules are found in `rtl/` by
name. Replace `tb_spin_nic` with any other testbench to run it.

`tb_spin_nic` runs the whole card at its default sizes. Four behavioural
HPUs run handlers modelled on the proposal's examples:

- accumulate into host memory;
- ping-pong replies sent from the card;
- a strided-datatype scatter;
- host atomics and a put from host;
- a DMA call past the end of its ME's buffer, which must be refused;
- a slow handler that overflows the packet buffer.

Host memory answers after 625 cycles, which is 250 ns at 2.5 GHz, the
proposal's latency for a discrete card. The test counts every mechanism,
and fails if any of them never happened:

- header, payload and completion handlers;
- parallel payload handlers;
- default deposit;
- `DROP` with its dropped-byte count;
- flow control and its event;
- ME miss and unknown-message packets;
- host and HPU-memory atomics;
- counters;
- both kinds of put;
- strided DMA;
- the DMA protection fault;
- memory bank contention.

The block testbenches check these timings and rates:

- the 75-cycle match;
- the 5-cycle CAM lookup;
- 512 cycles to store a 4 KiB packet;
- the 3-cycle-per-word send of a put from device;
- the DMA pipelining bound.

## Where this design departs from the proposal

- **Line rate.** The packet path moves 64 bits per cycle: 160 Gb/s at
  2.5 GHz. The proposal assumes a 400 Gib/s network, which would need at
  least 160 bits per cycle into the packet buffer. The beat width is the
  parameter to widen. `ingress`, `hpu_mem` and `put_unit` would all follow.
- **HPU count.** The simulated card of the proposal has four HPUs, which is
  the default here. Its discussion of packet rates speaks of eight. Only
  the `NUM_HPUS` constant changes.
- **Header packet first.** The proposal allows packets in any order. Here a
  packet that arrives before its message's header packet is dropped and
  counted, because its channel does not exist yet.
- **Execution contexts.** A buffer slot stands for an execution context.
  Flow control starts when all 8 slots are taken, not when all HPUs are
  busy. Tasks wait in a 32-entry queue.
- **Put from device** sends one word every three cycles. This is a
  simplicity, not a requirement.
- **Message identity** uses {source_id, msg_id} plus a per-packet offset
  and length in the header. The proposal's header type does not name
  these fields.
- **Not modelled:**
  - protection of the HPU memory itself: a handler may read or write any
    word of it (only its host DMA calls are bounds-checked);
  - the Portals failure counters;
  - the host link's bandwidth;
  - the network and the card's ordinary send engine, which appear only as
    the `rx_*`, `tx_*` and `hsq_*` ports.
