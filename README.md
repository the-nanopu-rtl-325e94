# nanoPU NIC and CPU network interface in SystemVerilog

A remote procedure call (RPC) that spends a few microseconds on a server is easily dominated by
the time its request spends reaching the right thread: traversing PCIe, DMA rings in memory, a
software network stack, a software load balancer and the OS scheduler. The nanoPU design removes
all of these steps from the path. The NIC terminates the transport protocol in hardware, reassembles
complete messages, picks a core, and places the message in a small FIFO that the running thread
reads **directly through a general-purpose register**. Replies are written to another register and
leave without touching memory. The NIC also does two jobs normally left to software:

* **Core selection.** Each message goes to the least loaded core that serves its port, with at most
  two outstanding messages per core (join-bounded-shortest-queue, JBSQ(2)).
* **Thread scheduling.** Each core has a hardware scheduler that interrupts the core when a more
  urgent thread has work. It can also take the top priority away from a thread that runs too long,
  which bounds the tail latency of well-behaved threads.

This repository holds RTL for the NIC, for the per-core interface that replaces the software path,
and for everything between them. It targets one 64-bit word per cycle at 3.2 GHz (204.8 Gb/s,
slightly above a 200 Gb/s link). The RISC-V core, its caches and the Ethernet MAC/SerDes are not
included. The top level exposes their connection points as ports.

## How a message moves

```
 MAC rx ─► ingress ─► reassembly ─► global RX queue ─► JBSQ core ─► local RX queue ─► netRX (x31)
               │          │   ▲      (one per port)     selector     (one per thread)
               │          │   └─ message buffer allocator
               │          └─► ACK/NACK ─────────────┐
               │          └─► PULL ─► PULL pacer ───┤
               └─► ACK/NACK/PULL for our messages   ▼
                      │                          egress ─► MAC tx
                      ▼                             ▲
 netTX (x30) ─► local TX queue ─► global TX queue ─► packetization (+ message buffer allocator)
                 (per thread)       (per core)
```

**Receive.** `ingress_pipeline` parses the 64-byte header. A packet that is not IPv4, not this
design's transport protocol (IP protocol 199) or not addressed to `my_ip` is dropped. DATA and
TRIM packets go to `reassembly`. ACK, NACK and PULL packets are about messages this node sent, so
they go to `packetization` as events.

`reassembly` identifies the message by (source IP, source port, sender's message id). On the first
packet it allocates a buffer from `msg_buffer_alloc`. It writes each packet at
`buffer base + packet offset × 128 words` and records the packet in a per-message bitmap. Packets
may therefore arrive in any order. For every DATA packet it asks egress for an ACK and the pacer
for a PULL. For every TRIM packet (a DATA packet whose payload a congested switch cut off) it asks
for a NACK and a PULL. When the bitmap is full the message is queued for delivery. Delivery writes
a one-word application header and then the data into the global RX queue of the destination port,
and frees the buffer. If no buffer is free, the packet is dropped silently and the sender recovers
by timeout.

`jbsq_core_selector` keeps, per port, a bitmap of the cores with a thread bound to it and a count
of that port's messages each core holds. It streams the head message of a port's queue to the
bound core with the smallest count below 2, preferring the lowest core on a tie. If every bound
core already holds two, the message waits until a core reports `lmsgdone` for that port. The
`core_net_if` of the chosen core steers the words into the local RX queue of the thread bound to
the port.

**Transmit.** The thread writes a one-word TX header (destination IP, destination port, length)
and then the data to netTX. `local_tx_queues` releases a message only once it is complete, so
two threads' words never interleave. It tags the message with the thread's port as the source
port. `global_tx_queues` takes whole messages round-robin from the cores. `packetization` stores
each message in its own buffer, whose id is the message id on the wire. It cuts the message into
packets of up to 1024 bytes. The first `INIT_WIN` packets are released at once, and later ones
only on PULLs from the receiver. `egress_pipeline` adds the Ethernet and IPv4 header fields and
sends control packets (ACK, NACK, PULL) strictly ahead of DATA.

**Measured latency** (end-to-end testbench, 3.2 GHz cycles):

* From the last word of an 8-byte request to its header word entering a core's queue: 5 cycles
  (1.6 ns). The paper's prototype budget for ingress plus assembly and delivery is 7.5 ns
  (24 cycles), and the testbench checks that bound.
* The ACK leaves 2 cycles after the last request word.

## Wire and application formats

All header words travel most-significant word first. The 64-byte wire header is one packed struct,
`pkt_hdr_t` in `nanopu_pkg`:

| bits (of 512) | field |
|---|---|
| 511:400 | Ethernet: destination MAC, source MAC, EtherType 0x0800 |
| 399:240 | IPv4 header (no options); `ip_len` = 50 + payload bytes; protocol 199 |
| 239:152 | transport: flags (DATA=bit0, ACK=1, NACK=2, PULL=3, TRIM=4), source port, destination port, message length in bytes, message id (8 bits), packet offset, pull offset |
| 151:0 | zero padding |

A 1 KB payload thus makes a 1088-byte packet of 136 words. The application header is a single
64-bit word: bits 63:32 hold the IP address, 31:16 the port and 15:0 the message length in bytes.
On receive it carries the sender's IP address and port, and on transmit the destination's. A
request header can therefore be echoed back unchanged as the reply header, which is what the
loopback application in the testbench does.

## The register interface and its speculation

The hardest part to get right is `local_rx_queues`, because reading netRX has a side effect. The
core reads netRX in its **decode** stage, and each read pops a word. Up to two reads per
instruction are allowed (rs1 and rs2, rs1 taking the first word). But an instruction in decode may
still be squashed. Each thread's queue therefore has three pointers:

* `wp`: the write pointer.
* `srp`: the speculative read pointer. Decode reads from it and advances it.
* `crp`: the committed read pointer. It advances by `wb_commit` (0 to 2) as reading instructions
  retire.

A `flush` sets `srp` back to `crp` plus whatever commits in the same cycle. A word is overwritten
only once it is committed. With a five-stage pipeline at most two reads are ever uncommitted, and
an assertion checks this bound. Reading an empty queue returns a stale word and pops nothing. The
software is expected to poll `lmsgsrdy` first.

`local_rx_queues` also counts messages per thread (so a thread has a pending message until it
writes `lmsgdone`) and keeps the arrival time of each thread's oldest message for the scheduler.

## Software interface: CSRs and the kernel's part

| CSR | number | read | write |
|---|---|---|---|
| `lcurport` | 0x800 | port of the last selected/bound thread | sets the port; if that port is bound on this core, its thread becomes the running thread (context switch) |
| `lcurpriority` | 0x801 | priority | sets the priority used by the next command |
| `lniccmd` | 0x802 | – | bit 0: bind `lcurport` at `lcurpriority` (allocates a thread slot, registers the core with the selector, makes the thread current); bit 1: unbind; bit 2: change priority |
| `lmsgsrdy` | 0x803 | 1 while the running thread's RX queue holds a word | – |
| `lidle` | 0x804 | – | the running thread declares itself idle until its next message |
| `lmsgdone` | 0x805 | – | the running thread finished a message: frees its JBSQ slot, restarts its processing timer |
| `lnextthread` | 0x806 | thread the scheduler wants running | – |

A kernel needs only this loop:

1. On `irq`, read `lnextthread`.
2. Save the current thread's context.
3. Write the next thread's port to `lcurport`.

The paper measured 160 cycles for such a switch, and the end-to-end testbench charges that delay.
The register numbers (x31 for netRX, x30 for netTX), the CSR numbers and the `lniccmd` bits 1 and
2 are this design's choices.

## Thread scheduling and bounded processing time

`thread_scheduler` (one per core, up to four threads) calls a thread **active** when it is bound,
has a pending message, and has not written `lidle` since that message arrived. The choice among
active threads works as follows:

* The lowest effective priority wins; 0 is the most urgent.
* Among equal priorities, the thread whose oldest message arrived first wins, so equal-priority
  work is served in FIFO order.
* `irq` stays high while the choice differs from the running thread.

**Bounded processing time.** A priority-0 thread has a timer that counts while it runs with a
pending message and is cleared by `lmsgdone`. The timer reaches `MAX_PROC_CYCLES` after 3200
cycles (1 µs). If `bound_en` is set at that point, the thread's effective priority drops to 1.
Another priority-0 thread with work then preempts it. The drop lasts until software writes the
thread's priority again.

**Idle rotation.** If no thread is active for `IDLE_TIMEOUT` cycles, the scheduler proposes the
next bound thread, so every thread eventually runs.

The paper gives the policy and x = 1 µs. The timer details and the idle timeout value are this
design's choices.

## Message buffers

`msg_buffer_alloc` splits one memory into fixed-size classes:

| class | size | count |
|---|---|---|
| 0 | 8 words (64 B) | 32 |
| 1 | 64 words (512 B) | 16 |
| 2 | 256 words (2 KB) | 8 |

That is 56 buffers and 3328 words, used on the transmit side. The receive side (`reassembly`)
uses larger classes: 64 × 8 words, 96 × 128 words (1 KB) and 8 × 256 words. That is 168 buffers
and 14848 words, enough to hold an 80-to-1 incast of 1 KB messages. Each class has a bitmap
free list. Allocation
returns the smallest free buffer large enough for the whole message, in the same cycle. Because
buffers have fixed sizes, locating a packet inside a message is a single addition. The buffer id
is also the message's table index. The class sizes are this design's choice, since the
paper gives none. They set the maximum message size to 2 KB, i.e. two packets.

## Transport details (NDP)

* Receiver side (`reassembly`): one ACK or NACK per packet, plus one PULL per packet.
  `pull_pacer` releases PULLs no closer than `PULL_GAP` = 136 cycles, one full packet time. The
  data they pull therefore arrives at line rate and does not build a queue at the switch.
* Sender side (`packetization`): each message keeps three bitmaps: to send, ACKed and NACKed.
  * An ACK marks a packet delivered.
  * A NACK marks it for resending.
  * A PULL releases the lowest NACKed packet if there is one, otherwise the next unsent packet.
  * A scan pointer frees fully acknowledged messages. It also re-queues every unacknowledged
    packet of a message that has made no progress for `RTX_TIMEOUT` cycles (9 µs). This covers
    packets lost without a trace, such as those dropped for lack of a receive buffer.

## Parameters

| parameter | default | where it comes from |
|---|---|---|
| `NUM_CORES` | 4 | quad-core prototype |
| `NUM_THREADS` | 4 per core | prototype limit |
| `JBSQ_N` | 2 | JBSQ(2) is the default policy |
| `MAX_PROC_CYCLES` | 3200 | x = 1 µs at 3.2 GHz |
| `IDLE_TIMEOUT` | 3200 | own choice |
| `NUM_PORTS` | 16 | own choice (size of the port table and number of global RX queues) |
| `INIT_WIN` | 64 packets | own choice: about one bandwidth-delay product of a 3 µs RTT at 200 Gb/s |
| `RTX_TIMEOUT` | 28800 cycles | own choice: about three RTTs (9 µs) |
| `PULL_GAP` | 136 cycles | one 1088-byte packet at 64 bits/cycle |
| local RX / TX queue depth | 256 / 512 words per thread | own choice; TX must hold a whole 2 KB message |
| global RX / TX queue depth | 512 words per port / per core | own choice |

## Where this departs from the paper

* **Ingress and egress are fixed-function.** The paper's NIC runs its transport in a programmable
  P4 pipeline. Here the parser and header builder handle exactly one header format, described
  above.
* **Not built:** the RISC-V core, caches and DRAM, the Ethernet MAC and SerDes, and the nanokernel
  (software). The end-to-end testbench plays the cores and the kernel.
* **No RSS baseline.** The RSS core selection that the paper compares against is not built.
* **One peer MAC address** is used for every outgoing packet (a point-to-point link to a switch).
* **Transmit buffers are allocated later.** The paper allocates a transmit buffer when the
  application writes the first word of a message. Here the message first collects in the local
  and global TX queues, and its buffer is allocated when its header word reaches
  `packetization`.
* **One global TX queue per core**, not per port. The paper describes TX queues as
  corresponding to the RX side without giving their organisation.
* **Bind commands are queued.** Bind commands from several cores in the same cycle are queued and
  granted round-robin.

## Files

`rtl/` holds one module per file, plus `nanopu_pkg.sv` with the shared types (header structs,
flag bits, CSR numbers). `nanopu_top.sv` wires all blocks together for `NUM_CORES` cores. Each
file opens with a description of its interface and timing.

`tb/` holds one self-checking testbench per module. `tb_nanopu_top` runs the complete design at
its default parameters with four modelled cores and a modelled remote host. It covers:

* JBSQ waits.
* Preemption and the priority downgrade.
* Idle rotation.
* Out-of-order and two-packet messages.
* A trimmed packet recovered through NACK and PULL.
* A retransmission after a lost ACK.
* A buffer-exhaustion drop.
* Flushed netRX reads.

It fails if any of these never happens, and it checks PULL spacing and receive latency. Every
testbench prints `TB_RESULT checks=N failures=M`.

`tb_workloads` runs three of the paper's experiments on the full design.

* **Single-core throughput with 1 KB messages.** The core reaches 193 Gb/s RX and TX. This is the
  link's limit for 1 KB payloads. The paper reports 195 and 200 Gb/s.
* **Bounded processing time.** One core runs a well-behaved and a misbehaving priority-0 thread.
  The misbehaving thread sometimes needs 5 µs. The well-behaved thread's worst latency is
  4969 cycles (1.55 µs) with the bound enabled, within the paper's 2.15 µs bound. With the
  bound disabled it is 17911 cycles, because the well-behaved thread waits behind the long
  request.
* **80-to-1 incast of 1 KB messages.** As in the paper's switch, 74 packets arrive in full and 6
  arrive trimmed. The NIC buffers all 80 messages and sends one NACK and PULL per trimmed
  packet. All 80 requests are answered in 21095 cycles (6.6 µs), with 6 NACKs and no timeout.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl --top-module tb_nanopu_top \
    rtl/nanopu_pkg.sv tb/tb_nanopu_top.sv -o tb
./obj_dir/tb
```

Replace `tb_nanopu_top` with any other testbench name. The end-to-end run simulates about 96,000
cycles and takes about 15 seconds.
