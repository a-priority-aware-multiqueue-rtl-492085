# Priority-aware multiqueue NIC receive path

A small real-time controller connected to an IP network gets an interrupt for
every received packet, and an interrupt preempts whatever task is running, no
matter how important that task is. A flood of traffic for an unimportant
service can therefore stall a control loop. This design moves priorities into
the network interface. Every process that binds a socket gets its own
receive queue. Packets for the critical process raise an interrupt at once.
Packets for less important processes are held back and announced together,
one interrupt per batch. Packets for no process at all are dropped before they
cost the CPU anything.

The RTL covers the receive side of such a NIC, from the MAC's frame stream to
the interrupt line and a host register interface. The idea, the block set
and the moderation parameters come from the published design "A
Priority-Aware Multiqueue NIC Design for Real-Time IoT Devices" (Behnke et
al., SAC 2022). That publication describes the design at the level of a block
diagram and a parameter list, so widths, encodings, handshakes, the register
map and the buffer organisation are choices made here. Each is marked as such
below and in the opening comment of each file.

## The receive path at a glance

```
             +-----------+   meta    +----------+  queue / drop reason
 MAC  ------>| rx_parser |---------->| dist_map |-------------+
 bytes   |   +-----------+           +----------+             v
         |                                             +-------------+  bytes  +-----------+
         +-------------------------------------------->| rx_dispatch |-------->| rx_buffer |<--- host byte reads
                                                       +-------------+         +-----------+
                                                    commit |   ^ full, write slot
                                                           v   |
                                       +-----------------------------+
                                       | per queue q = 0..NUM_QUEUES-1|
                                       |  rx_ring  ->  irq_moderator |--fire--> irq_ctrl --> irq
                                       +-----------------------------+
                    nic_csr: host register bus (queue setup, map entries, status, pops, counters)
                    usec_tick: 1 us time base for the moderation timers
```

`mq_nic_top` wires these together. Outside it are the Ethernet MAC/PHY, which
deliver frames as a byte stream, and the host CPU, which configures the NIC
and services its interrupt over the register bus.

## Classifying a frame

`rx_parser` watches the bytes the dispatcher accepts. It expects an untagged
Ethernet II frame with no preamble and no FCS. A frame is valid only if all of
these hold:

* the EtherType is IPv4 (0x0800);
* the IP version is 4 and IHL is at least 5;
* the protocol is TCP or UDP;
* the fragment offset is 0, because later fragments carry no port;
* the IPv4 header checksum is correct. The parser sums the header as it
  streams past.

The parser emits exactly one record per frame: "valid" plus the destination
port, or "invalid". The record comes after the byte that completes the port,
which is byte 14 + 4·IHL + 3, so at most byte 77. It comes earlier if a check
fails or the frame ends first. No verdict ever needs more than the header,
and this bounds how much the dispatcher must buffer.

`dist_map` is the distribution map, a table of `MAP_ENTRIES` entries. Each
entry holds a valid bit, a destination port and a queue number. A lookup
compares the port against every entry in one cycle. The lowest-numbered
matching entry wins. A miss means that no process has bound the port. The
queue number stands for the process. A process's priority is not stored
anywhere in hardware: it takes effect only through how its queue is
moderated. Ports are the only key. Addresses and protocol are not compared.

A frame gets one of these outcomes. Each drop reason has its own counter:

| outcome | decided | meaning |
|---|---|---|
| deliver to queue q | parse + map | valid header, port registered, queue q enabled and not full |
| `DROP_BADHDR` | parse | failed a header check |
| `DROP_NOMAP` | parse + map | port not registered, or its queue is disabled |
| `DROP_FULL` | when the frame reaches the head of the hold FIFO | the queue's ring has no free slot |
| `DROP_OVERSZ` | during the copy | longer than `SLOT_BYTES` |
| `DROP_MACERR` | last byte | the MAC flagged the frame (`s_err` with `s_last`) |

If more than one reason applies, the first row that applies in this table
order is reported.

## Queues, slots and the dispatcher

The receive buffer (`rx_buffer`) is a pool of `NUM_SLOTS` slots of
`SLOT_BYTES` bytes each. A byte's address is `{slot, offset}`. Each slot also
has a 16-bit descriptor word that holds the length of the frame in it. The
host divides the pool among the queues. Queue q gets a contiguous range
`[base, base+size)`, and the size of that range is the queue's size. Each
queue's `rx_ring` walks its range as a ring buffer. It tracks the slot to fill
next (`wr_slot`), the oldest unread slot (`head_slot`) and the number of
frames held. Writing a queue's range empties that queue. The hardware does
not check that two ranges overlap: the driver must prevent that.

`rx_dispatch` moves frames from the MAC into slots. It runs two FIFOs side by
side:

* a **hold FIFO** (`HOLD_DEPTH` bytes, default 128) takes every byte as it
  arrives;
* a **decision FIFO** takes each frame's classification, in frame order.

The drain side stops at the first byte of a frame until that frame's decision
is present. On that first byte it checks whether the target ring is full.
Because frames drain strictly in order, every earlier frame has already
committed by then, so the full check is exact. After that it copies one byte
per cycle into the slot. On the frame's last byte it does one of two things:

* **commit**: it writes the descriptor and advances the ring. The ring's new
  state is visible to the next frame one cycle later.
* **drop**: it reports the reason. The slot is reused.

The input runs at the full rate of one byte per cycle. Each frame waits at
the FIFO head only until its own header is parsed, and from then on the
drain keeps pace with the input. The backlog therefore stays at about one
header, well inside 128 bytes. `s_ready` falls only if the hold FIFO fills,
or if the decision FIFO is within two entries of full, which takes many tiny
frames. A real MAC cannot be held off, so in practice `s_ready` should never
fall. The dispatcher testbench checks that it does not at full rate.

Latency from a frame's last byte at the input to its commit is about one
header length, roughly 40 cycles for a plain TCP/IPv4 frame.

## Interrupt moderation

This is the core of the design. Each queue has its own `irq_moderator`, which
collects packets into a *window* and ends the window with one interrupt.
The host sets three optional conditions per queue. Each has an enable bit:

| condition | register | starts / resets | fires when |
|---|---|---|---|
| absolute timer | `QR_ABS` (µs) | loaded by the first packet of a window; later packets do not touch it | it reaches 0 |
| packet timer | `QR_PKT` (µs) | reloaded by every packet | it reaches 0, i.e. after a quiet gap |
| count threshold | `QR_CNT` | - | the window holds `cnt_thr` packets |

The window ends as soon as any enabled condition holds and at least one
packet is pending. If no condition is enabled, every packet ends its own
window, which means no moderation. An enabled timer of 0 fires straight away,
as the packet commits. That is how a critical queue is set up
(`QR_ABS = en | 0`).

What the settings do:

* **Absolute timer D.** Under steady load the queue interrupts about once
  every D, whatever the packet rate, so one interrupt covers about rate × D
  packets. This is what bounds the interrupt load during a flood. A packet
  waits at most D. For a flood of 5000 packets/s at D = 3200 µs, that is 16
  packets per interrupt, or 94 % fewer interrupts than unmoderated.
* **Packet timer P.** A burst is reported P after its last packet. On its
  own, under continuous traffic with gaps shorter than P, it would hold
  packets for ever. Pair it with an absolute timer or a count threshold.
* **Count threshold N.** Caps how many frames a window can hold. Set it at or
  below the queue's size so that a window cannot overflow its ring before the
  timers fire.

Timing details, which the testbenches check:

* Timers count `tick_us` pulses (`usec_tick` divides the clock by
  `CLK_MHZ`). The first tick comes at some arbitrary point in the current
  microsecond, so a timer of N fires between N−1 and N µs after it is loaded.
* `fire` is registered. It rises one cycle after the condition holds, about
  two cycles after the packet's commit for a zero timer. The cause bit in
  `irq_ctrl` is set on the next edge.
* The edge that ends a window clears the pending count and the timers. A
  packet committed in that same cycle opens the next window.
* The pending count saturates at 255 (`CNT_W = 8`).
* The moderation registers can be rewritten at any time. An absolute or
  packet timer that is enabled while packets wait, and whose count has
  already run out, ends the window at once.

`irq_ctrl` ORs each queue's `fire` into a cause register and drives one
level-sensitive `irq` line: `irq = |(cause & mask)`. The host clears a cause
bit by writing 1 to it. A new request in the same cycle as a clear of the
same bit wins.

## Host view

The host talks to the NIC over a single-cycle register bus. `csr_we` with
`csr_addr` and `csr_wdata` writes on the clock edge. `csr_rdata` is
combinational from `csr_addr`. Frame bytes are read through a separate port:
put `{slot, offset}` on `buf_raddr` and the byte appears on `buf_rdata` one
cycle later. Addresses are word addresses. Queue q's registers start at
`0x10 + 8q`. The constants are in `rtl/nic_pkg.sv`.

| address | access | contents |
|---|---|---|
| 0x01 | R / W1C | interrupt cause, bit per queue |
| 0x02 | RW | interrupt mask |
| 0x03 | RW | queue enable. A disabled queue's frames are dropped as unmapped. |
| 0x04-0x08 | R | drop counters: bad header, unmapped, full, MAC error, oversize |
| 0x0A | R | frames delivered |
| 0x10+8q+0 | RW | ring range: [7:0] base slot, [15:8] size. Writing empties the queue. |
| 0x10+8q+1 | RW | absolute timer: [31] enable, [15:0] µs |
| 0x10+8q+2 | RW | packet timer: [31] enable, [15:0] µs |
| 0x10+8q+3 | RW | count threshold: [31] enable, [7:0] packets |
| 0x10+8q+4 | R | status: [7:0] frames held, [15:8] head slot, [23:16] packets pending in the window |
| 0x10+8q+5 | R | length of the head frame |
| 0x10+8q+6 | W | pop: release the head frame |
| 0x80+m | RW | map entry m: [31] valid, [23:16] queue, [15:0] destination port |

A driver would use the NIC like this:

1. **Socket bound.** Pick a free queue and write its range and moderation
   settings. Write a map entry for the port. Set the queue's bits in the
   enable and mask registers.
2. **Socket freed.** Clear the map entry's valid bit and the queue's enable
   bit.
3. **Interrupt service routine.** Read the cause and write the same value
   back to acknowledge it. Then, for each cause bit:
   1. read the queue's status and take the frame count;
   2. for each frame, read the head length, read the bytes at the head slot,
      and pop.

   Take the frame count once, before popping, because popping lowers it.

All of this can be done while traffic is flowing. The only caveat is that
changing a queue's range discards the frames it holds.

## Parameters

| parameter | default | origin |
|---|---|---|
| `NUM_QUEUES` | 4 | four processes, one queue each, as in the published evaluation |
| `MAP_ENTRIES` | 8 | chosen here |
| `NUM_SLOTS` | 64 | chosen here |
| `SLOT_BYTES` | 2048 | chosen here. Must be a power of two. Holds a 1518-byte frame. |
| `HOLD_DEPTH` | 128 | chosen here. Must exceed the longest header (78 bytes). |
| `CLK_MHZ` | 125 | chosen here: a byte-wide 1 Gb/s receive clock |
| `TIMER_W`, `CNT_W` | 16, 8 | chosen here (in `nic_pkg`): timers up to 65.5 ms, windows up to 255 packets |

At the defaults the buffer is 128 KiB plus 64 descriptors. Both are plain
arrays with one write and one read port, so they can map onto on-chip SRAM.

## What is followed and what is chosen here

The following come from the published design:

* per-process receive queues built as ring buffers in a divided receive
  buffer;
* a distribution map from destination port to process, set by the OS;
* dropping of packets that no process is registered for, before any
  interrupt;
* per-queue moderation by an absolute timer, a packet timer (reset by each
  packet) and a counter threshold;
* one interrupt line to the CPU;
* two configuration paths, "configure queues" and "set mapping", usable at
  run time;
* a variable number of queues in use;
* four queues, with timer values of 0 / 1 / 5 ms and 800-3200 µs as examples.

The following are choices made here:

* the set of header checks;
* the byte-stream interface and its `s_err` flag;
* the hold-FIFO dispatcher;
* drop-on-full, with no overwriting of unread frames;
* the slot pool with base/size ranges;
* the descriptor, which holds only the length;
* the rule that the absolute timer starts at the first packet of a window;
* OR-combining of the conditions;
* microsecond units;
* the cause/mask/W1C interrupt scheme;
* the register map and bus;
* all sizes in the table above.

Not included:

* the transmit direction: the block diagram shows traffic both ways, but only
  the receive side is described;
* DMA into host memory: the host reads frames out of the NIC's buffer
  instead;
* the MAC and PHY;
* any use of the process priority other than through the moderation
  settings.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`. Each has a watchdog. Results are checked
against values worked out in the testbench, not read back from the block.

| testbench | what it checks |
|---|---|
| `tb_rx_parser` | Random valid frames with varied IHL and TCP/UDP, plus one frame for each defect (EtherType, checksum, protocol, fragment, truncated, IHL < 5). Each frame must give exactly one record, with the right verdict and port, by the end of the port. |
| `tb_dist_map` | registration, first-match priority, removal and read-back, against a reference table, 200 random updates |
| `tb_rx_ring` | pointers, wrap-around, full/empty and reconfiguration, against a queue model |
| `tb_rx_buffer` | byte and descriptor write/read-back with read latency |
| `tb_rx_dispatch` | 40 mixed frames: every commit/drop and reason, slot, length and stored bytes. Also a full-rate phase that must have no stall cycle. |
| `tb_irq_moderator` | Each mode on its own and in combination: no moderation, zero timer, absolute timer (not restarted, periodic under load), packet timer (restarted), count threshold, and threshold plus absolute. Checks interrupt counts and the delay against the N−1…N µs window. |
| `tb_irq_ctrl` | cause, W1C, mask and request-over-clear, against a model, 500 random cycles |
| `tb_nic_csr` | register map read-back, strobes, status words and counters |
| `tb_mq_nic_top` | The whole NIC at its default parameters, with a host model servicing interrupts; see below. |
| `tb_flood_workload` | The flood experiment at the default parameters; see below. |

`tb_mq_nic_top` sets up four queues: critical, 20 µs absolute timer, 10 µs
packet timer, and threshold 4 backed by a 100 µs absolute timer. It sends
frames, checks that every delivered frame arrives byte for byte in the right
queue, and checks that each interrupt matches its queue's rule to the cycle.
A second phase overflows a queue and sends an oversize frame. A third changes
the map and disables a queue at run time. The testbench counts how often
each mechanism happened and fails if one never did: immediate interrupt,
absolute timer, packet timer, count threshold, each drop reason, ring
wrap-around, and a window holding more than one packet.

`tb_flood_workload` repeats the published flood experiment in shortened form.
Each queue gets about 60 MODBUS/TCP requests per second. A flood of 5000 or
15000 packets/s goes to queue 3, whose absolute timer is set to nothing,
800, 1600, 2400 or 3200 µs. Each setting runs for 40 ms of simulated time.
The critical queue must raise one interrupt per packet in every run. The
flooded queue must coalesce about D × rate packets per interrupt. Observed
at 5000 packets/s:

| setting | flood packets | interrupts | saved vs. unmoderated | interrupts per 100 packets, all queues |
|---|---|---|---|---|
| nomod | 202 | 202 | - | 100 |
| d800 | 202 | 50 | 76 % | 26 |
| d1600 | 202 | 25 | 88 % | 14 |
| d2400 | 202 | 17 | 92 % | 11 |
| d3200 | 202 | 13 | 94 % | 9 |

At 15000 packets/s with d3200, 603 packets produce 13 interrupts, about 46
per interrupt. Over all queues that is 3 interrupts per 100 packets, and the
testbench requires at most 5. The published figure is 2, measured with
different background traffic. That takes 48 or more slots in the flooded queue, so the
testbench gives it 52 of the 64.

## Simulating

Any testbench runs with plain Verilator 5. The packages go first:

```
verilator --binary --timing --assert -Irtl -y rtl \
    rtl/nic_pkg.sv tb/tb_frame_pkg.sv tb/tb_mq_nic_top.sv --top-module tb_mq_nic_top
./obj_dir/Vtb_mq_nic_top
```

`tb_frame_pkg.sv` is only needed by the testbenches that build frames: the
parser, top and flood testbenches. Unit testbenches that set small
parameters run in well under a second. `tb_mq_nic_top` takes well under a second.
`tb_flood_workload` takes about 30 s.

When changing the design, keep these constraints in mind:

* `SLOT_BYTES` must stay a power of two, because a slot address is the
  concatenation `{slot, offset}`;
* `HOLD_DEPTH` must stay above the longest header the parser may wait for;
* `NUM_QUEUES` can grow to 14 before the per-queue registers run into the map
  window at 0x80;
* `MAP_ENTRIES` can grow to 128.
