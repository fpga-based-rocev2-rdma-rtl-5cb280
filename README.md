# RoCEv2 readout back-end: from JESD204C samples to RDMA WRITEs on 10 GbE

This is synthesizable SystemVerilog for the back-end of a SiPM camera readout chain. Twelve
ADC channels arrive as recovered JESD204C lane words. The design keeps a short history of
every channel. A simple leading-edge trigger selects 50 ns windows. Each selected window is
written straight into a remote server's memory with RoCEv2 RDMA WRITE operations over a
10 Gb/s Ethernet link, with no processor involved.

The readout uses a Reliable Connection. The server's NIC acknowledges what it received.
Lost or damaged packets are sent again, so every event that leaves the board arrives in
order or is reported as failed. There is no receive path for RDMA data: the board only
writes. The only RoCEv2 frames it accepts are the acknowledgements for its own writes.
Ordinary UDP datagrams on other ports still pass through the same Ethernet port in both
directions, for whatever control protocol is layered on top.

```
 lane_data[12][64] ──┬─► circ_buffer ──► packetizer ──► addr_mgr ──► roce_engine ──► udp_mac ──► XGMII TX
 (JESD204C words)    │        ▲              │   ▲                      │   ▲           │
                     └─► trigger             ▼   └──── completions ─────┘   └── ACK/NAK ◄┘◄── XGMII RX
                                         event_mem ◄──── payload reads ───┘
          cfg_regs (AXI4-Lite): threshold, channel enables, QP context, addresses, target, counters
          utx_* / urx_* (plain UDP datagrams, other ports) ◄──► udp_mac
```

The JESD204C receiver, the transceivers and the 10GBASE-R PCS/PMA are vendor IP. They are
not part of this code. `be_top` takes the receiver's output as ports (`lane_valid`,
`lane_data`) and presents 64-bit XGMII (`xgmii_txd/txc`, `xgmii_rxd/rxc`) for the PCS.
The plain UDP channel appears as two streams on `be_top` (`utx_*` to send, `urx_*` for
what was received).

## Sample format and time base

Each lane carries one ADC channel. The ADC samples at 1 GS/s with 9-bit resolution. The
lane is recovered as one 64-bit word per 187.5 MHz clock, which is 12 Gb/s, or 12 bits per
sample. The design therefore reads a lane as a stream of 12-bit samples. Sixteen samples
fill three words (192 bits). Sample *k* of a group sits at bits `12k+11:12k`, counting from
bit 0 of the group's first word. This packing is the design's own reading of those rates.
If the real link packs the samples differently, only the unpacking in `trigger` changes.

Time is counted in lane words (5.33 ns each) from reset. This count is a 32-bit number that
wraps after 22.9 s. Trigger timestamps, buffer addresses and event headers all use it.

## Trigger (`trigger`)

The trigger collects the three words of a group on all 12 lanes. It then checks all 16 × 12
samples in one clock. A lane fires when one of its samples is above `threshold` and the
sample before it is not. The comparison carries over from the last sample of the previous
group.

The timestamp is the word that holds the earliest firing sample in the group. The lane mask
lists every lane that fired in that group.

After a trigger, further triggers are suppressed for `HOLDOFF` words (10, one window), so a
long pulse produces one event. `trig_valid` rises the clock after the third word of a group.

## Circular buffer and event format (`circ_buffer`)

Every valid clock, the buffer writes the full 768-bit row (12 lanes × 64 bits). The write
address is the low bits of the word count, so the memory always holds the last `DEPTH`
rows. That is 1024 rows, or 5.46 µs.

Triggers wait in a 4-entry FIFO. For each trigger, the readout waits until the whole window
has been written: from `ts − PRE` to `ts − PRE + WINDOW − 1`. It then sends one event on a
64-bit AXI4-Stream:

| word | content |
|------|---------|
| 0 | `[63:48]` event number, `[47:32]` lane mask, `[31:0]` trigger timestamp |
| 1 + 12·r + l | lane *l* of row *r*, r = 0..9 (row 0 = `ts − 3`) |

An event is 121 words, or 968 bytes. `tlast` marks the last word. The stream delivers one
row every 13 clocks.

**What happens under back-pressure.** The buffer offers an event only when its sink is
ready. While it waits, it tests the window's age every clock. When the sink stops accepting
for a long time:

- a trigger that finds the FIFO full is dropped (`trig_dropped`);
- a queued window is discarded (`trig_stale`) if it is older than
  `DEPTH − 13·WINDOW` = 894 rows, because new data would overwrite it before it could be
  read.

Event numbers count only the events that are sent. A gap in the timestamps on the server
side therefore shows lost triggers, not a corrupted stream.

## Event slots and work requests (`packetizer`, `event_mem`)

The packetizer copies each event into one of 8 slots of 1 KiB in `event_mem`. It then posts
an RDMA WRITE work request. The request holds an 8-bit id, the slot's byte address and the
length, 968 bytes.

Slots are used and freed in order. A slot is freed by the engine's completion for its
write. Completions of a Reliable Connection arrive in posting order.

When all 8 slots are waiting for acknowledgement, `stalled` is high. The packetizer then
refuses the next event. That back-pressure is what ages out and drops triggers upstream.
The slot count fixes how much data can be in flight: 8 × 968 B.

`event_mem` is a simple dual-port RAM with a registered read that returns the old value on
a write to the same address. The engine reads a slot once per transmission, and again for
every retransmission. Nothing is copied for resending.

## Remote addresses and target switching (`addr_mgr`)

Connection set-up is a software job: the protection domain, the queue pair, registering the
server's buffer, and exchanging keys. Software writes the result into the registers as a
*staged target*:

- destination MAC and IP address;
- remote QPN;
- starting PSN;
- `rkey`;
- base and size of the remote buffer.

Writing 1 to `CTRL` (`apply`) asks `addr_mgr` to switch:

```
S_INIT ──apply──► S_DRAIN ──engine idle──► S_SWITCH ──► S_RUN ──apply──► S_DRAIN …
```

In `S_DRAIN`, new work requests are held. The FSM waits until the engine has nothing
outstanding, so no packet of the old connection is still unacknowledged. `S_SWITCH` then
copies the staged target to the active one, resets the ring offset and pulses `qp_load`.
The engine restarts its PSN at the new start value and leaves any error state.

While running, the remote buffer is used as a ring. Each work request gets
`raddr = base + offset` and the target's `rkey`. The offset advances by the write length.
When the next event would not fit, the offset goes back to the base and `wrapped` pulses.
The server knows from the event header where each event came from. How it tracks its read
pointer is outside this design.

## RoCEv2 requester (`roce_engine`)

This is a transmit-only RDMA WRITE requester for one Reliable Connection queue pair.

**Send queue.** It holds up to 8 work requests, with four pointers:

- `head`: oldest not completed;
- `hi`: first WR with no PSN yet;
- `send`: next WR to transmit;
- `tail`: next free entry.

A WR gets its PSN range the first time it is sent.

**Segmentation.** A write of *len* bytes becomes ceil(len / PMTU) packets, with PMTU =
256 · 2^`pmtu_log2` (256 to 4096 bytes):

- one packet: `WRITE_ONLY`;
- more than one: `WRITE_FIRST`, then `MIDDLE`…, then `LAST`.

The first packet carries the RETH (remote address, rkey, total length). The last packet
sets AckReq. The engine hands `udp_mac` a descriptor (opcode, PSN, QPN, P_Key, RETH
fields, payload length). It then sends the payload words, read from `event_mem` with the
read primed one clock ahead.

**Acknowledgements.** The engine uses only ACKs whose destination QP is its own.

- An ACK for PSN *p* acknowledges everything up to *p*. Every WR whose last PSN is now
  acknowledged completes, in order, with a completion (CQE, status OK).
- A NAK with "PSN sequence error" (syndrome `0x60`), or an RNR NAK, acknowledges up to
  *p − 1*. It then triggers go-back-N from *p*. The engine finds the WR that holds *p*.
  It resumes at byte offset `(p − first PSN of the WR) · PMTU`, with the right
  FIRST/MIDDLE/LAST opcode.
- Any other NAK is fatal.

**Ack timer.** The timer runs while anything is unacknowledged and restarts on progress.
After `timeout` clocks without progress, the engine resends from the oldest unacknowledged
PSN. After `retry_max` retries in a row without progress, the queue pair enters the error
state. Every
queued WR then completes with an error status: retry-exceeded for the oldest, flushed for
the rest. `qp_load` recovers it.

**Not implemented.** The MSN field of incoming ACKs is ignored; completion tracking uses
PSNs only. There is no SEND, no RDMA READ, no responder, and no congestion control.

## UDP/IP/Ethernet and the invariant CRC (`udp_mac`, `udp_mac_tx`, `udp_mac_rx`)

**Transmit.** `udp_mac_tx` builds each frame as:

- Ethernet II header;
- IPv4 header: 20 bytes, TTL 64, DF set, identification counting from 0, header checksum
  computed;
- UDP header: source port from the registers, destination port 4791, checksum 0;
- BTH, with the RETH when present;
- the payload;
- the 4-byte iCRC;
- the Ethernet FCS.

The whole frame is built into a 1024-word store-and-forward FIFO before it is sent. The
XGMII side sends the start word `FB 55 55 55 55 55 55 D5` in lane 0, the frame, a terminate
character, then at least 12 idle bytes.

**The iCRC** is the RoCEv2 end-to-end check. It is a CRC-32 with the Ethernet polynomial,
seeded with eight `0xFF` bytes. It covers the frame from the IP header up to the end of the
payload. Before the CRC is computed, the fields that routers may change are replaced by
ones:

| frame byte | field |
|------------|-------|
| 15 | IP TOS |
| 22 | IP TTL |
| 24–25 | IP header checksum |
| 40–41 | UDP checksum |
| 46 | BTH reserved byte (FECN, BECN and the resv6 bits) |

Both the transmitter and the receiver apply the masking on the fly. This is done inside
the 8-byte-per-clock CRC update.

**Receive.** `udp_mac_rx` stores the first 128 bytes of an incoming frame. After the
terminate character, it checks the FCS and the iCRC at 8 bytes per clock. It takes the
frame as an acknowledgement only if all of these hold:

- both CRCs are good;
- the frame is addressed to this MAC and IP;
- the frame comes from the active target's IP;
- the frame is UDP to port 4791;
- the opcode is ACKNOWLEDGE.

An accepted frame produces one `ack_valid` strobe with QPN, PSN, syndrome and MSN.

**Plain UDP.** The iCRC additions must not get in the way of ordinary UDP traffic.
Transmit: a datagram is offered as a header (`udp_dgram_t`: ports and byte length) plus
payload words, with byte 0 in bits 7:0. It gets a 42-byte Ethernet/IPv4/UDP header and
the FCS, with no BTH and no iCRC. It goes to the same MAC and IP as the RoCEv2 traffic,
since there is no ARP. When RoCEv2 packets and datagrams are both waiting, the two take
turns frame by frame.

Receive: a frame for this MAC and IP on any UDP port other than 4791 needs only a good
FCS. Its payload is streamed out of the receive buffer at 8 bytes per clock with byte
enables, under back-pressure. The sender's IP, the ports and the length stay on `urx_hdr`
until the last word. Because the receive buffer holds 128 bytes, a datagram can carry at
most 82 payload bytes. That is enough for register-access messages; longer frames are
dropped. A frame that starts while the previous one is still being checked or
delivered is also dropped. A reader that holds `urx_tready` low for long can therefore
cost acknowledgements; the ack timer and retransmission recover from that.

Any other frame is counted as a CRC error or as dropped.

## Registers (`cfg_regs`, AXI4-Lite, 8-bit byte address)

| addr | name | content (reset) |
|------|------|-----------------|
| 0x00 | CTRL | write bit 0 = apply staged target |
| 0x04 | THRESH | `[11:0]` trigger threshold (256) |
| 0x08 | CH_EN | `[11:0]` trigger lane enables (all) |
| 0x0C | SQPN | `[23:0]` own QPN (1) |
| 0x10 | QPCTL | `[15:0]` P_Key (FFFF), `[18:16]` log2(PMTU/256) (4 = 4096), `[22:20]` retry count (7) |
| 0x14 | TIMEOUT | ack timeout in clocks (65536) |
| 0x18/0x1C | SRC_MAC | low 32 / high 16 bits |
| 0x20, 0x24 | SRC_IP, SRC_PORT | own IP, UDP source port |
| 0x28/0x2C, 0x30 | DST_MAC, DST_IP | staged target |
| 0x34, 0x38, 0x3C | DQPN, START_PSN, RKEY | staged target |
| 0x40/0x44, 0x48 | BASE, SIZE | staged remote ring (64-bit base, 32-bit size) |
| 0x7C | STATUS | `[0]` engine idle, `[1]` QP error (read only) |
| 0x80+4i | counters | 32-bit, read only |

The counters in `be_top`, by index *i*:

0. events sent
1. triggers dropped (FIFO full)
2. triggers discarded as stale
3. clocks stalled (all slots in flight)
4. good completions
5. error completions
6. retransmissions
7. ack timeouts
8. NAKs received
9. frames sent
10. ACKs accepted
11. received frames with a bad CRC
12. received frames dropped
13. ring wraps

## Clock and reset

Everything runs on one clock, `clk`, which is meant to be the 187.5 MHz lane clock. A
single clock keeps the design simple. At 64 bits per clock, the MAC side then has 12 Gb/s
for a 10 Gb/s line. On a real board the PCS runs at its own rate. An asynchronous FIFO
would then go between `udp_mac_tx` and the PCS, and another between the PCS and
`udp_mac_rx`; neither is included here.

Reset (`rst_n`) is synchronous and active low. It clears all control state. Memories are
not cleared: nothing reads them before writing.

## Where this departs from the original system

- **The RoCEv2 core.** The original core is written in Bluespec, adapted from a full HCA by
  removing the receive data path and RDMA READ. The engine here is a new, much smaller
  implementation of the same function: one RC QP, RDMA WRITE, acknowledgements and
  retransmission. Its resource use is not comparable with the original.
- **UDP/MAC stack.** The original stack is a library stack extended for the iCRC. It is
  rewritten here, with the same iCRC insertion and checking.
- **Register transport.** Registers are reached over AXI4-Lite. The original uses a
  reliable UDP register protocol driven by control software; that protocol is not
  included. Only the plain UDP channel it would run on is provided.
- **Own choices, not given by the original.** These are all this design's own:
  - the buffer depth, the 3-row pre-trigger and the hold-off;
  - the event header;
  - the slot scheme;
  - the ring addressing and the drain-before-switch rule;
  - the timer and retry defaults;
  - every register address.
- **Single clock domain**, described above.
- **Not included:** zero suppression, the cluster trigger planned for production,
  congestion control (DCQCN), and more than one queue pair or target at a time.

## Throughput to expect

An event is a single 968-byte write. With PMTU ≥ 1024 it travels as one packet, and its
wire cost is 968 + 98 bytes:

| bytes | what |
|-------|------|
| 8 | preamble |
| 14 | Ethernet header |
| 20 | IPv4 header |
| 8 | UDP header |
| 12 | BTH |
| 16 | RETH |
| 4 | iCRC |
| 4 | FCS |
| 12 | minimum gap |

A 10 Gb/s line therefore carries at most 9.08 Gb/s of event data, about 1.17 M events/s.

| PMTU | packets per event | share of the line |
|------|-------------------|-------------------|
| 512 | 2 | 84 % |
| 256 | 4 | 74 % |

Large bulk writes would reach about 98 % at PMTU 4096. Events are fixed at one window, so
this design does not make such writes.

`tb_throughput` measures 0.724, 0.835, 0.907, 0.901 and 0.901 of the XGMII bandwidth as
event data at PMTU 256, 512, 1024, 2048 and 4096, within 2 % of these bounds.

The readout side sustains one event per 132 clocks, which is 11 Gb/s at 187.5 MHz. With 8
events in flight, acknowledgements may take up to about 6 µs before the line, not the
round trip, becomes the limit.

## Verification

Each block has a self-checking testbench in `tb/`. The expected values are computed in the
testbench, independently of the RTL. Each prints `TB_RESULT checks=N failures=M`.

`tb_pkg` holds the reference models:

- a bit-serial CRC-32;
- FCS and iCRC over a finished byte list;
- the IPv4 checksum;
- an ACK frame builder.

| testbench | what it establishes |
|-----------|---------------------|
| `tb_trigger` | trigger word and lane mask for hand-placed pulses; earliest sample wins; hold-off; disabled lane; strict threshold; one-clock latency |
| `tb_circ_buffer` | every word of every window traced to its source row; event numbers; FIFO overflow and aged-out windows under a stalled sink, with every trigger accounted for |
| `tb_packetizer` | slot addresses, ids and lengths; slot contents; stall with all slots in flight; error completion |
| `tb_event_mem` | random traffic against a model, read-before-write, held read address, every word read back |
| `tb_addr_mgr` | hold before the first target; drain-before-switch; ring addresses and wraps; second target |
| `tb_roce_engine` | segmentation at 256 B; coalesced ACK; NAK at a WR boundary and mid-WR; timeout; retry exhaustion with flush; recovery across the PSN wrap |
| `tb_udp_mac` | every header byte, payload, iCRC, FCS and gap of transmitted frames; good, corrupted, misaddressed and foreign ACKs, and a NAK; a plain UDP datagram sent beside a RoCEv2 packet, and plain datagrams received (good and bad FCS) |
| `tb_cfg_regs` | reset values; every register's read-back and decoded field; apply pulse; counters; status |
| `tb_be_top` | whole design at default parameters, described below |
| `tb_throughput` | whole design at default parameters, saturated with triggers, for each PMTU from 256 to 4096: share of the XGMII bandwidth carrying event data against the wire-format bound |

**`tb_be_top`** runs the complete design with every parameter at its default. It drives
pulses into the 12 lanes. A behavioural RoCEv2 target on the XGMII pins:

- checks FCS, iCRC, addressing and PSNs;
- writes the payload into a model of the server memory;
- acknowledges and NAKs like a NIC;
- checks every completed event word by word against the lane data.

The run has three phases. It loses packets, withholds acknowledgements during a trigger
burst, switches to a second target with a start PSN just below the 24-bit wrap, and
injects a corrupted and a foreign ACK. During the last phase a plain UDP datagram
arrives; a model of the software side echoes it back; and the echo must reach the target
intact. At the end it reads the status counters over
AXI4-Lite and compares them with what the target saw. It fails if any of these never
happened: single-packet and segmented writes, NAK recovery, timeout, retransmission,
duplicates, stall, trigger drop, stale window, ring wrap, target switch, PSN wrap, CRC
rejection, foreign-ACK rejection, plain UDP in and out. It takes about 15 s of wall time.

To run a testbench with Verilator 5 from the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb rtl/be_pkg.sv tb/tb_pkg.sv \
          tb/tb_be_top.sv --top-module tb_be_top -Mdir obj
./obj/Vtb_be_top
```

Replace `tb_be_top` with any other testbench name. The block testbenches that need a
shorter run (for example, a 256-row buffer) set parameters on their block only.
