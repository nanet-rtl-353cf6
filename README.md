# NaNet-1 receive datapath in SystemVerilog

NaNet-1 is a PCIe network card built so that a GPU can act as a real-time
trigger processor. A detector readout board sends its events as UDP datagrams
over Gigabit Ethernet. The card puts the payload of each datagram straight
into a ring of receive buffers in GPU memory. Nothing is copied on the way and
no CPU touches a packet. The host learns that a buffer has filled, and the GPU
kernel that processes it can start at once. The latency is low and, just as
important, nearly constant, because no operating system sits in the path.

This RTL builds the card's receive datapath, from the Ethernet MAC's receive
stream to the DMA write requests handed to the PCIe core. It is a single clock
domain, with a 200 MHz clock assumed throughout.

```
 MAC rx (32 bit) ──► udp_offloader ──► nanet_ctrl ──┐ port 0
 APElink 1..3 (128-bit packets) ────────────────────┤ ports 1..3
                                                    ▼
                                              apenet_router
                                                    ▼
                    clop_addr_gen ◄── address ── ni_tx ──► PCIe DMA writes (dma_*)
                    (receive ring)   request       │  ▲
                          │                        ▼  │
                          └─ events ──► evt_*     v2p_xlate (page table)

 prof_timer: cycle counter, stamped into the optional profiling footer
```

| module          | role |
|-----------------|------|
| `udp_offloader` | Strips the Ethernet, IPv4 and UDP headers from 32-bit MAC words and emits the UDP payload, realigned, with its length, ports, source address and arrival time. |
| `nanet_ctrl`    | Wraps each payload in an APEnet+ packet: a 128-bit header, the payload packed four 32-bit words per 128-bit word, and an optional profiling footer. |
| `apenet_router` | Merges the GbE channel and three APElink channels into the Network Interface input, one whole packet at a time, round robin. |
| `ni_tx`         | Network Interface transmit-to-memory block. It gets each packet's destination, translates it, and writes the packet as PCIe write bursts. |
| `clop_addr_gen` | The receive ring (a circular list of persistent buffers). It places each packet and reports each buffer it closes. |
| `v2p_xlate`     | Direct-mapped page table that turns virtual addresses into physical ones. |
| `prof_timer`    | Cycle counter for the latency profiler. |
| `nanet_top`     | Wires the chain and holds the host register map. |
| `nanet_pkg`     | Shared widths, header and footer layouts, and events. |

## The problem of the 42-byte header

An Ethernet II header, an IPv4 header without options and a UDP header add up
to 14 + 20 + 8 = 42 bytes. That is not a multiple of four. So in the MAC's
32-bit stream, the first payload byte sits in the low half of frame word 10.
The offloader counts frame words and checks a few fields on the way:

- word 3: EtherType 0x0800, version 4, IHL of at least 5;
- word 5: the more-fragments flag, the fragment offset and protocol 17.

IP options shift the UDP header by `IHL − 5` words, and the offloader follows
that shift.

From the word holding payload bytes 0–1 onwards, it keeps the low 16 bits of
each word. Each output word is `{held half, high half of the next word}`. Its
mask zeroes everything past the UDP length, which removes the Ethernet
padding of short frames and a trailing partial word. When the frame ends, a
flush state emits the last held half. Dropped frames are counted and
swallowed whole:

- EtherTypes other than IPv4;
- IP versions other than 4;
- IP fragments;
- protocols other than UDP.

No checksum is checked. Without stalls the offloader takes one word per cycle,
which is 6.4 Gbit/s at 200 MHz. The first payload word leaves one cycle after
the frame word holding payload bytes 2–3 is taken.

## APEnet+ packets on the 128-bit side

Everything after the offloader works on 128-bit words (`ape_beat_t`: data,
sop, eop). A packet has three parts:

1. **Header**, one word. The real APEnet+ header layout is not public, so this
   design uses its own (`ape_hdr_t`):
   - magic 0xA5;
   - channel number;
   - footer flag;
   - payload length in bytes;
   - UDP ports;
   - IPv4 source address;
   - a per-channel sequence number.
2. **Payload**, `ceil(len/16)` words.
   - Each 32-bit network-order word is byte-swapped, and the first one goes
     to bits 31:0.
   - So the 128-bit word, stored little-endian, puts the payload bytes in
     memory in the order they arrived.
   - The last word is zero-filled.
3. **Footer** (optional), one word. Only when profiling is on.

An APElink channel is expected to deliver packets that already have this
format.

The header never reaches memory: `ni_tx` consumes it. The space a packet
takes in a buffer is `pkt_bytes(len, prof) = 16·ceil(len/16) + 16·prof`. So
every packet starts 16-byte aligned.

## Receive ring: placing packets and closing buffers

The host registers a ring of up to `MAX_BUFS` = 32 buffers. Each buffer has a
virtual base and a size in bytes, a multiple of 16. Writing the ring length
starts filling at buffer 0, offset 0.

For every packet, `ni_tx` asks `clop_addr_gen` where the packet's
`pkt_bytes` go. The answer comes one cycle later and follows these rules:

- **It fits in the current buffer**: it goes at the current offset.
- **It does not fit, and the current buffer already holds data**: the current
  buffer is *closed for room*, and the packet goes at offset 0 of the next
  buffer.
- **It is larger than the buffer it would go into**: the packet is *refused*.
  Its words are skipped and the drop counter counts it. The same happens with
  an empty ring or a zero length.
- **It brings its buffer exactly to its size**: the buffer is *full*. It
  closes, and the next packet starts the next buffer.

A closed buffer becomes a receive event, `{buf_idx, bytes}`, on `evt_*`. This
is the signal that the host (or a GPU kernel) may consume that buffer. The two
kinds of event come at different times:

- a buffer closed for room is reported as soon as the address answer arrives,
  because nothing more will be written to it;
- a full buffer is reported in the cycle after the last word of the packet
  that filled it is accepted by the PCIe side.

The ring does not wait for the host to return buffers. As in the measured
setup, it assumes the consumer keeps up.

With 1168-byte datagrams (16 detector events) and buffers of 8 × 1168 bytes,
32 datagrams close exactly four buffers. The end-to-end test replays this
case.

## Translation and PCIe bursts

`ni_tx` walks a packet in bursts:

1. It takes the header, which gives the byte count. The address request goes
   out in the next cycle.
2. It waits for the address answer, then looks up the burst's virtual address
   in `v2p_xlate`. The lookup answers one cycle later.
3. It streams the burst's words to `dma_*`, with `dma_addr` = the physical
   start of the burst, constant through the burst.

A burst ends at the packet end or at the next 256-byte boundary
(`MAX_BURST`), whichever comes first. Every burst is translated on its own.
Pages are 64 KiB and a multiple of 256 bytes, so no burst crosses a page. A
packet, and a buffer, may therefore span pages that are scattered in physical
memory.

A translation miss drops the rest of the packet and is counted in
`ni_miss_cnt`. The miss can happen at any burst, so the earlier bursts have
already been written. The table is direct-mapped: entry `vpn mod 256` holds a
tag, the physical page and a valid bit. The host must not register two live
pages on one entry; the 256 entries map 16 MiB.

The cost is two cycles of address lookup per burst. Without stalls, the first
DMA word appears 5 cycles after the header is offered. Then one 16-byte word
goes out per cycle within a burst, plus the lookup cycles between bursts. The
PCIe side can stall at any time (`dma_ready`). The stall propagates back
through the router and `nanet_ctrl` to the MAC (`mac_ready`). A real MAC has a
FIFO that absorbs it.

## Profiling footer

With control bit 0 set, `nanet_ctrl` appends a footer word of four 32-bit
cycle stamps from `prof_timer`. The footer lets software break a packet's
latency down by stage.

| bits    | stamp  | taken when |
|---------|--------|------------|
| 31:0    | t_rx   | the frame's first word entered the offloader |
| 63:32   | t_pay  | `nanet_ctrl` emitted the packet header |
| 95:64   | t_addr | `ni_tx` received the destination address |
| 127:96  | t_dma  | `ni_tx` sent the packet's first DMA word |

`ni_tx` fills in the last two stamps as the footer word goes by. The footer is
written to memory right after the payload, inside the buffer.

## Host registers (`nanet_top`)

Host registers are written through `cfg_we` / `cfg_addr` / `cfg_wdata`. Write
the page table and the buffers first, then the ring length.

| address       | content |
|---------------|---------|
| 0x0000        | bit 0: profiling footer on; bit 1: cycle counter runs; bit 2: clear cycle counter |
| 0x0001        | ring length (re-arms the ring at buffer 0) |
| 0x1000 + 2i   | virtual base of buffer i |
| 0x1001 + 2i   | size of buffer i in bytes |
| 0x2000        | page-table entry: [47:0] virtual page, [95:48] physical page, [96] valid |

The top also exposes the following status outputs:

- counters: `udp_pkt_cnt`, `udp_drop_cnt`, `ni_pkt_cnt`, `ni_drop_cnt` (refused
  packets) and `ni_miss_cnt`;
- `cycle_count`;
- the ring position, `ring_buf` and `ring_off`.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N_APELINK` | 3 | APElink channels into the router (NaNet-1 has three) |
| `MAX_BUFS` | 32 | receive ring length |
| `PAGE_BITS` | 16 | page size, 64 KiB |
| `V2P_ENTRIES` | 256 | page table entries |
| `MAX_BURST` | 256 | PCIe write burst limit in bytes |

The 32-bit and 128-bit widths and the four I/O channels are those of NaNet-1.
The ring length, page size, table size and burst size are this design's own
choices.

## How far it follows the original card, and where it departs

What matches the card as published:

- the chain MAC → UDP offloader → NaNet controller → router → Network
  Interface → PCIe;
- the 32-bit offloader channel at 6.4 Gbit/s;
- packing into 128-bit APEnet+ words;
- three APElink channels sharing the router with the GbE channel;
- a receive ring of persistent buffers in GPU memory with per-buffer
  receive events;
- a profiling footer of up to four cycle-counter values.

Where this design departs:

- **Address generation and translation are logic here.** On NaNet-1 they run
  as firmware on the card's Nios II microcontroller, which the published
  profiling showed to be the main source of latency jitter. The authors named
  dedicated logic as the next step. `clop_addr_gen` and `v2p_xlate` are that
  logic.
- **Formats are invented.** The APEnet+ header, footer layout, byte order,
  event format and register map are this design's own.
- **The router only merges.** The APEnet+ router is a full 3D-torus switch.
  Here it is only the merge of the I/O channels towards the Network
  Interface.
- **Not built, and present only as ports:**
  - the Ethernet MAC and PHY;
  - the PCIe core, the GPU-side RDMA logic and the completion path;
  - the APElink link layers (8b/10b, word stuffing, link control);
  - the Nios II microcontroller and its software;
  - the NI receive side, on-board memory and its controller;
  - the card's custom-logic slot.
- **Only the receive direction is built.** The APElink channels are
  bi-directional on the card, but only their packets towards memory enter
  here. Nothing is sent from the card.
- **The ring has no flow control.** It never waits for the host to free a
  buffer.
- **The offloader trusts the frames.** It checks no IP or UDP checksum and
  does not reassemble IP fragments; it drops them.

## Simulating

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. To build and
run one with plain verilator:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_nanet_top \
    -y rtl -y tb rtl/nanet_pkg.sv tb/tb_eth_pkg.sv tb/tb_nanet_top.sv
./obj_dir/Vtb_nanet_top +verilator+rand+reset+2
```

`tb_eth_pkg` builds Ethernet/IPv4/UDP frames and is needed by
`tb_udp_offloader` and `tb_nanet_top`.

| testbench | what it establishes |
|---|---|
| `tb_udp_offloader` | Payload and sideband of random datagrams, with and without IP options. Drops other EtherTypes, TCP and fragments, and survives a short frame. Checks the one-word-per-cycle rate and the first-word latency. |
| `tb_nanet_ctrl` | Header fields, byte order, zero fill, footer stamps and the sequence number. Checks the output timing: the last word of a W-word packet leaves W cycles after the header, W + 1 with the footer. |
| `tb_apenet_router` | Packets stay whole and in order per source. Checks strict rotation under full load and one idle cycle between packets. |
| `tb_clop_addr_gen` | The 32 × 1168 B case and 2300 random requests against a reference model. Checks the one-cycle answer. |
| `tb_v2p_xlate` | Hits, tag misses and removed entries. Checks one answer per cycle. |
| `tb_ni_tx` | Bursts never cross 256 B, translated addresses, refused and untranslated packets, footer stamps and event order under random stalls. Checks the 5-cycle header-to-data time. |
| `tb_prof_timer` | Counting, clear priority and wrap-around. |
| `tb_nanet_top` | End to end at default parameters; see below. |
| `tb_nanet_workloads` | The evaluation workload at default parameters: 1168-byte datagrams into rings of buffers of 1 to 64 datagrams (16 to 1024 events). It checks every event, each packet's translated address and the event delay after the last MAC word (3 cycles at most). It also checks throughput with the MAC running back to back: about 306 cycles per datagram, 10.4 MEvents/s at 200 MHz, against one datagram every 1974 cycles on a saturated Gigabit link. |

`tb_nanet_top` runs the whole design with no parameter overrides and a
byte-level memory model behind the PCIe port. It has four phases:

1. The 32 × 1168-byte case. The first datagram's first word reaches the
   memory 19 cycles after entering the MAC port.
2. Profiling on, with traffic on all three APElink channels at once, random
   PCIe stalls, a TCP frame, buffers straddling pages and buffers closed for
   room.
3. A missing page-table entry.
4. A buffer too small for the datagram.

Each packet is checked in memory when it completes. It counts each mechanism
and fails if any never occurred:

- full and room closes;
- footers;
- page crossings;
- stalls;
- APElink traffic;
- drops, misses and refusals.

A run takes a few seconds.
