# A NaNet-style receive path for a GPU low-level trigger

The lowest trigger level of a particle-physics experiment has to decide, within
a fixed and short time budget (about 1 ms for the NA62 experiment at CERN),
which collisions are worth keeping. Running that decision on a GPU lets it use
refined quantities, such as the rings of Cherenkov light in the RICH detector,
in place of simple hit counts. It also moves the problem to I/O. The data of
each event arrive as fragments from several readout boards (TEL62) over Gigabit
Ethernet. They must reach GPU memory with low and predictable latency, and they
must be fused into whole events before the ring-finding kernel can run. Fusing
on the GPU was measured to be too slow, because it is serial work.

The RTL here is the receive side of a NaNet-style network interface card (an
FPGA on PCIe that writes straight into GPU memory). Described in words:

* The UDP/IP protocol is removed in hardware on every link, with no operating
  system in the path.
* Datagrams are sorted by the board that sent them. Boards may have a link each
  or share one link through an Ethernet switch.
* Each board's event fragments are kept until all boards have reported.
* Fragments from different boards whose timestamps fall in the same time window
  are fused into one event.
* Each event is written by DMA into a ring of persistent receive buffers in GPU
  (or host) memory.
* The host is told when a buffer is ready. That happens when the buffer is full
  or when a gathering time has passed since its first event.

The source, "GPU-based Real-time Triggering in the NA62 Experiment", names
these functions but gives no RTL detail. So every format, handshake and rule
below is a design choice made to do what the source describes. The section
"What comes from the source" sorts the two out.

## Data path

```
 MAC rx[0] -> udp_rx --+                +--> frag_rx (board 0) --+
 MAC rx[1] -> udp_rx --+--> board_router +--> frag_rx (board 1) --+--> event_merger
 MAC rx[2] -> udp_rx --+    (by sender)  +--> frag_rx (board 2) --+         |
 MAC rx[3] -> udp_rx --+                 +--> frag_rx (board 3) --+         v
                                                                      clop_manager --> rdma_write_engine --> PCIe
                                                                        ^      |
                                                                        |      +--> comp_* : "buffer i ready, n bytes"
                                           host register writes --> ctrl_regs
```

| module | job |
|---|---|
| `udp_rx` | checks Ethernet/IPv4/UDP headers, keeps one UDP port, forwards the payload bytes and the sender's address byte |
| `board_router` | sends each payload byte to the fragment store of the board that sent it |
| `frag_rx` | cuts the payload into fragments and stores complete ones: a header FIFO plus a hit FIFO that is committed per fragment |
| `event_merger` | picks the oldest timestamp, fuses all fragments within the window, writes one event |
| `clop_manager` | places events in the buffer ring, closes buffers (full or time), reports them, drops events when the host is behind |
| `rdma_write_engine` | cuts each write into PCIe write requests (at most 256 bytes, never across 4 KB) |
| `ctrl_regs` | host-visible configuration and the buffer hand-back command |
| `nanet_top` | wires the above for `N_LINKS` links and `N_BOARDS` boards |
| `sync_fifo` | helper FIFO (fragment headers) |
| `nanet_pkg` | stream structs, fragment header, register addresses |

Everything runs on one clock. The link paths take one byte per cycle, which is
1 Gb/s per link at 125 MHz, and so do the fragment stores. From the merger
on, the path is 32 bits wide. On a
board, clock-domain crossings would sit at the MACs and at the PCIe core. Those
two parts, the Ethernet PHY/MAC and the PCIe Gen2 x8 endpoint, are vendor IP
and are not included. The top exposes the MAC receive streams (`rx[]`) and the
write-request stream (`tlp`) as ports.

## Data formats

All words are 32 bits, and bytes on the wire are big-endian.

**Fragment, as sent by a readout board** (inside a UDP payload; several may
follow one another in one datagram):

| word | content |
|---|---|
| 0 | timestamp |
| 1 | number of hits `n` in bits 15:0 |
| 2 .. n+1 | one hit word each (opaque to the NIC) |

**Fused event, as written to memory:**

| word | content |
|---|---|
| 0 | timestamp `T`, the smallest of the fused fragments |
| 1 | `{mask[7:0], 8'h00, total[15:0]}`: which boards contributed, and the total number of hits |
| 2 .. | hits of the contributing boards, lowest board first, each board's hits in arrival order |

Events are packed back to back from the start of a buffer and never straddle
two buffers. The host walks a closed buffer from word 0 up to the reported byte
count, using `total` to step from one event to the next.

**Write requests** (`tlp_beat_t`): one beat per data word. On the `sop` beat,
`addr` and `len_dw` carry the request's bus address and its number of words.
`eop` marks the last word. The PCIe core turns these into memory-write TLPs.

## Sorting by board (`board_router`)

Fusing by time window needs one time-ordered fragment stream per board, not
per link. In the reported test setup the boards reach a single NIC port
through a switch; in the final setup each board has a link of its own. Both
work: `udp_rx` passes on the last byte of the sender's IPv4 address, and its
low `log2(N_BOARDS)` bits give the board number. Boards are therefore given
consecutive addresses (for example .20 to .23). Each link delivers whole
datagrams one after another, so every board stream also consists of whole
datagrams. A board is expected to send on one link at a time. If two links
carry bytes for the same board in the same cycle, the lower link wins and
`route_collision_cnt` counts the lost byte. The datagram that lost it arrives
damaged, so a non-zero count means a wiring or address error. The router adds
one cycle.

## Fusing fragments by time window (`event_merger`)

This is the part that replaces the slow GPU merge, and its rules decide what the
GPU sees.

1. **When to decide.** The merger waits until every *enabled* board
   (`REG_BOARD_EN`) has at least one complete fragment stored. A board can have
   nothing for a window, so it also stops waiting `REG_MRG_WAIT` cycles after
   the first fragment became available (default 256). Behind a switch, where
   boards take turns on one link, the host should raise this limit.
2. **What to fuse.** Among the boards that have a fragment, it takes the
   smallest timestamp `T`. It then selects every board whose head fragment has
   `ts - T < REG_MRG_WINDOW`, computed as a 32-bit modular difference. The
   minimum is also found with signed modular differences, so a timestamp
   counter that wraps inside a window is handled.
3. **Output.** One cycle to decide, then the two header words, then the hits
   board by board. While `out_ready` is high the event streams at one word per
   cycle with no gaps. The event length (`2 + total`) is given on `out_len`
   with the first word, so the buffer manager can place the event before it
   has arrived.
4. **What is left.** A fragment outside the window stays at the head of its
   board's store and is considered again for the next event. A fragment that arrives
   after its window was already emitted becomes an event of its own. The
   counters `partial_cnt` (fewer boards than enabled) and `timeout_cnt` (the
   wait limit ended the waiting) show how often either happened.

The merger only compares the heads of the board stores. Fragments of one board
must therefore arrive in time order, which a readout board does by
construction.

## Fragment store and its drop rules (`frag_rx`)

A network link cannot be stalled, so each board's store has to absorb bursts and
drop cleanly when it cannot. Hits are written at a *speculative* write pointer.
The pointer the merger sees moves, and the fragment's header is pushed, only
after the last hit of the fragment has been stored. A fragment is dropped
whole (pointer rolled back, `drop_cnt` incremented) in these cases:

* its datagram ends inside it (truncated);
* it declares more than `MAX_HITS` hits (64, the largest event the trigger
  expects). The rest of that datagram is then skipped, since its framing can no
  longer be trusted;
* the hit store or the header store has no room for it.

A new datagram always starts a new fragment. The header becomes visible one
cycle after the fragment's last byte. `udp_rx` forwards each payload byte one
cycle after it enters. It cuts the payload at the UDP length field, so Ethernet
padding never reaches the parser. It drops frames with another EtherType, with
IPv4 options, with a protocol other than UDP, or with another destination port.

## Receive-buffer ring (`clop_manager`)

The host registers a ring of persistent buffers once: the "circular list of
persistent buffers", CLOP. A buffer is either *NIC-owned*, meaning it is being
filled or is free to fill, or *host-owned*, meaning it is closed and waiting for
the GPU. For each event, the manager does one of the following:

* **drops** it if it is longer than a buffer, or if the current buffer is still
  host-owned (overflow, because the consumer is too slow); this is counted in
  `buf_drop_cnt`;
* **closes the current buffer first** if the event does not fit in the space
  left, then places the event at the start of the next buffer;
* **writes** it otherwise: one descriptor (`base[cur] + 4*fill`, length) goes to
  the RDMA engine, the words follow, and `fill` advances. A buffer filled
  exactly is closed at once.

The gathering timer starts with the first event in a buffer. When it reaches
`REG_FRAME_TIME` cycles (default 50 000, which is 400 µs at 125 MHz), the buffer
is closed between two events. A close waits until the RDMA engine is idle, so
the host never sees a report before the data. It then pulses `comp_valid` with
the buffer index, the byte count and whether time (`comp_timeout`) or space
caused it, and moves to the next buffer of the ring.

For the ring to work, the time frame has to be no longer on average than the
GPU takes to process a buffer. Otherwise the ring fills and events are dropped.

## RDMA write engine (`rdma_write_engine`)

With peer-to-peer DMA, GPU memory is an ordinary range of PCIe bus addresses, so
one path serves GPU and host buffers alike. The engine splits each write into
requests of `min(words left, MAX_PAYLOAD/4, words to the next 4 KB boundary)`
words. It computes each request's length when the request's first word leaves.
The data path is combinational, so the engine adds no cycle and moves one word
per cycle while the PCIe core is ready. An assertion checks the size and
4 KB rules on every request.

## Host interface (`ctrl_regs`)

Word-addressed write port (`reg_wr`, `reg_addr[7:0]`, `reg_data[31:0]`):

| addr | register | reset |
|---|---|---|
| 0x00 | UDP destination port | 58913 |
| 0x01 | board enable mask | all boards |
| 0x02 | merge window (timestamp units) | 1 |
| 0x03 | merger wait limit (cycles) | 256 |
| 0x04 | gathering time frame (cycles) | `TIMEOUT_RST` = 50 000 |
| 0x05 | buffer size (words) | `BUF_BYTES/4` = 2048 |
| 0x06 | buffers in the ring (0 or too many means all) | `N_BUF` = 8 |
| 0x07 | hand buffer `data` to the NIC | command |
| 0x10+2i, 0x11+2i | low and high 32 bits of buffer i's bus address | 0 |

Start-up sequence: write the window and the ring size, write each buffer's
address, then write each index to 0x07. After consuming a buffer reported on
`comp_*`, the host writes its index to 0x07 again.

## Parameters

| parameter | default | origin |
|---|---|---|
| `N_LINKS` | 4 | the final trigger input uses 4 GbE links |
| `N_BOARDS` | 4 | 4 readout boards in the pictured setup |
| `BUF_BYTES` | 8192 | buffer size used in the reported test run (8 KB) |
| `TIMEOUT_RST` | 50000 | the reported 400 µs gathering time, at an assumed 125 MHz |
| `MAX_HITS` | 64 | the largest event size the ring algorithms are built for |
| `N_BUF` | 8 | assumed (the source only says the number is tunable) |
| `HIT_DEPTH`, `HDR_DEPTH` | 256, 16 | assumed; power-of-two depths required |
| `MAX_PAYLOAD` | 256 | assumed PCIe maximum payload size |

## What comes from the source and what does not

Taken from the source:

* the chain from links to GPU memory;
* UDP carried in hardware;
* 4 GbE links and 4 readout boards, which may share a link through a switch;
* fusing of timestamped fragments from different boards by time window;
* a ring of persistent receive buffers in GPU or host memory, registered by the
  host;
* buffer reports when a buffer is full or when a configurable time has passed;
* a hardware RDMA copy engine;
* buffer size 8 KB and gathering time 400 µs;
* at most 64 hits per event.

This design's own choices:

* all formats and the register map;
* telling boards apart by the sender's address;
* the clock (125 MHz) and the widths;
* the merger's waiting rule and window test;
* the fragment drop rules;
* buffer ownership and the overflow drop;
* waiting for DMA idle before a report;
* the PCIe request splitting;
* the reset values not listed above.

Departures and gaps, known and deliberate:

* **No flow control towards a switch.** Boards sharing a link share its
  1 Gb/s; nothing slows them down when it is full, and the switch's own
  buffering is outside this design.
* **1 Gb/s links only.** The 10 GbE variant (NaNet-10) would need a 64-bit link
  path at 156.25 MHz and a wider merged path. That is not built.
* **Processing options not built.** Decompression, reformatting and custom
  (non-UDP) link protocols are mentioned as per-experiment options without
  detail, and are not built.
* **Not modelled:** the GPUDirect "V2" staging mode, clock-domain crossings,
  IP/UDP checksum checks and FCS checking (the MAC is assumed to pass only
  good frames).
* **Software and external parts, not part of this RTL:** the host driver, the
  GPU ring-finding kernels (histogram and Ptolemy-theorem "Almagest"
  algorithms), the TTC daughtercard, the PHY/MAC and the PCIe core.

## Capacity against the reported uses

* **2015 test run** (2 boards, 8 KB buffers, 400 µs gathering, 130–350 events
  per buffer). This fits: mask off two boards, which may sit behind one link
  through the switch as reported. Buffer size and time frame are the
  defaults. 350 events in 2048 words leave 5.85 words per event, which is
  3.85 hits on average after the 2-word event header. Denser events close
  buffers by size sooner. `tb_workload_2015` runs this setup.
* **Final input** (4 × 1 GbE). This fits: the merged path carries 4 Gb/s at
  125 MHz, more than the payload share of four GbE links.
* **Largest event** (64 hits). This fits: 2 + 4 × 64 = 258 words at most, well
  under one buffer.
* **10 Gb/s links.** This does not fit (see above).
* **About 10 MHz of events.** Whether this fits depends on hits per event,
  which the source does not give. The merged path allows 12.5 words per event
  on average at that rate.

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and has a watchdog. Expected values are worked
out in the testbench itself (hand-written event lists, an independent
byte-walk model of request splitting, a hit pattern that encodes board,
timestamp and index).

| testbench | covers |
|---|---|
| `tb_udp_rx` | payload sizes 1–1000 bytes (padding), the five reject cases, the 1-cycle latency, the sender byte |
| `tb_board_router` | 4×4 and 3×3 sizes against a cycle model: steering, collisions, senders of no board, two boards on one link |
| `tb_frag_rx` | several fragments per datagram, 0-hit fragments, too many hits, truncation, overflow of both stores, header timing |
| `tb_event_merger` | full window, window edge, wait limit, disabled board, timestamp wrap, back-pressure, no bubbles |
| `tb_clop_manager` | registration, fill, close on no-fit and on exact fit, ring wrap, overflow drop, time close, oversize drop |
| `tb_rdma_write_engine` | full rate (N words in N cycles), 4 KB and maximum-payload cuts, random gaps |
| `tb_ctrl_regs` | reset values, every register, hand-back pulse |
| `tb_nanet_top` | the whole path at default parameters: 520 events from 4 boards through 8 KB buffers, see below |
| `tb_workload_2015` | the reported 2015 setup at default parameters: 2 boards behind a switch on one link, 1300 events at two rates; every buffer closed by the 400 µs gathering time must hold 130 to 350 events (it sees 167 to 313) |

`tb_nanet_top` drives four links with independently packed datagrams, then
sends 50 events with all four boards on link 0 as behind a switch, and
captures the write requests in a sparse memory. On every buffer report it
parses the buffer, checks each fused event against the fragments that were
sent, and hands the buffer back. It checks that every event lands in a buffer
or in the overflow count. It also checks that each of these happened at least
once:

* a wrong-port frame;
* boards sharing one link, sorted by sender;
* a truncated fragment;
* a full and a partial fusion;
* the merger wait limit;
* a full close and a time close;
* a buffer overflow;
* PCIe back-pressure;
* a 4 KB cut and a maximum-payload cut.

It runs in well under a second of simulator time.

Run a testbench with Verilator 5 (from the folder holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
  --top-module tb_nanet_top rtl/nanet_pkg.sv tb/tb_pkt_pkg.sv tb/tb_nanet_top.sv
./obj_dir/Vtb_nanet_top
```

Replace `tb_nanet_top` by any other testbench name. The package files must come
first. The testbenches reset the design with a falling edge of `rst_n`: every
flip-flop has an asynchronous active-low reset.
