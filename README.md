# APEnet+ network interface core: SystemVerilog model

APEnet+ is a PCIe card that joins hybrid CPU/GPU compute nodes into a 3D-torus
network. Each card has six bidirectional off-board links (X+, X-, Y+, Y-, Z+,
Z-) to its neighbours. It moves data between the memories of different nodes by
remote DMA (RDMA), and it can read from or write to GPU memory directly, with
no copy through host memory. This RTL covers the card's own logic between the
PCIe controller and the link transceivers. It follows the design described in
*"Architectural improvements and 28 nm FPGA implementation of the APEnet+ 3D
Torus network for hybrid HPC systems"* (Ammendola et al.). That paper is a
status report: it says *what* each improvement does and gives few internal
details. Where it is silent, this RTL makes its own choice. Each choice is
stated in the opening comment of the file concerned and in the "Departures"
section below.

The paper presents four mechanisms, and all four are built here:

1. **Two concurrent TX DMA engines** fed by a prefetchable command queue. Two
   PCIe read requests are in flight at once, so their long completion latencies
   overlap.
2. **A hardware TLB on the receive path.** Virtual destination addresses are
   translated in logic. The embedded Nios II processor is asked only on a
   miss.
3. **APElink transmission control.** Packets are framed on each link with a
   light word-stuffing protocol, and the data flow is managed. Here this means
   credit flow control within a 40 KB memory budget per channel.
4. **LO|FA|MO, a local fault monitor.** The host and the card watch each other
   through watchdog registers. Diagnostic messages to the six neighbours travel
   inside the link protocol.

A fifth part follows the paper's AXI4-based PCIe interface diagram: the
256-bit FIFOs, the RAM, the HOST RX / NIOS multiplexer and the 32-bit
"External Register" file.

## Block map

```
             PCIe side (outside)                         |  link side (outside)
                                                         |
 cmd_* ──► FIFO CMD INST ──► dual_dma ──► FIFO HOST TX ─┐ |
 rd_req_* ◄────────────────── (2 engines, RAM)           ├► pkt_arbiter ► pkt_demux ─► apelink_channel x6 ─► link_tx_*
 cpl_*    ──────────────────►                            │   (HOST/GPU)   (header port)  (TX buf, apelink_tx,
 gpu_tx_* ─► FIFO GPU TX ───────────────────────────────┘ |                              apelink_rx, RX buf)  ◄─ link_rx_*
                                                         |                                    │
 host_*  ◄── mux ◄── FIFO HOST RX ◄── rx_dma_ctrl ◄── packet queue ◄── pkt_arbiter (6 links) ◄┘
             ▲  └─── FIFO NIOS ◄── nios_in_*   │  ▲
             │                                 │  └── tlb ◄── tlb_reg_* (processor)
   CTRL bit 0│           miss_*, nios_cmd_* ◄──┘
             │                       eq_* ◄── FIFO EQ ◄── (event per packet)
 s_* AXI4-Lite ──► ext_regs ◄──► lofamo ◄──► diag words in every apelink_channel
```

`apenet_top` wires all of this together. Its ports are plain signals and
arrays. Every data word is 256 bits: the paper requires a 256-bit back-end
datapath at 250 MHz for PCIe Gen3 x8. The register bus is 32 bits.

## Packets and word formats

A packet is a run of 256-bit words with a `last` flag on its final word. The
first word is a header. All layouts are defined in `apenet_pkg.sv`, with
fields listed from most to least significant. They are this implementation's
own; the paper gives none.

| type | fields | use |
|---|---|---|
| `cmd_t` | rsvd, port[3], len[16], dst_vaddr[64], src_addr[64] | host's TX command: read `len` words at `src_addr` and send them to `dst_vaddr` on link `port` |
| `hdr_t` | rsvd, port[3], len[16], vaddr[64] | network packet header |
| `wrhdr_t` | rsvd, gpu, len[16], paddr[64] | first word of a PCIe write produced by the receive path |
| `event_t` | rsvd, tlb_hit, gpu, len[16], vaddr[64] | completion event, one per received packet |

`len` counts payload words, so the header is not included. A header-only packet
(`len` = 0) is legal.

## Transmit: why two DMA engines

On the TX side the card must read each message out of host memory. A PCIe read
spends a long, system-dependent time between its request and its completion.
With one engine, request B cannot start until message A has come back, so the
bus sits idle for most of the time. With two engines, request B is issued
right after request A, and the two completion streams interleave on the bus.
The paper estimates up to 40 % less total time.

`dual_dma` works as follows:

* Commands leave the command FIFO in order. They go round-robin to the
  engines, and an engine takes a new command as soon as it is free.
* A busy engine issues one read request. Its tag is the engine number.
* Completions may interleave between tags but arrive in order within a tag.
  Each word is written into the engine's slot of a shared RAM, which holds
  `N_ENG x MAX_WORDS` words.
* A drain pointer, also round-robin, emits packets in command order. It sends
  the header first, then each payload word as soon as that word is in the RAM.
  The engine becomes free when its last word has left.

With the testbench's settings (60-cycle latency, 16-word messages), two
engines need 459 cycles where one needs 730: 37 % less time.
`N_ENG` is a parameter. Commands longer than `MAX_WORDS` (128 words, 4 KB)
are cut to that length, so software must split long messages into packets.

## Receive: TLB first, processor on a miss

A received packet names a *virtual* destination address. The payload must be
written to the right *physical* page, which may be in host memory or in GPU
memory. In the original card the Nios II firmware did every translation. In
this design a hardware TLB does it, and the firmware is used only when the TLB
does not know the page.

* `tlb` is fully associative (32 entries, 4 KB pages by default). A lookup
  compares against all entries in parallel, and the result comes one cycle
  later. An entry stores the virtual page, the physical page and a
  GPU-memory flag. A registration either overwrites the entry for the same
  virtual page or replaces a round-robin victim. `flush` clears every entry.
  Hit and miss counters can be read in register `TLB_STATS`.
* `rx_dma_ctrl` takes a packet from the packet queue and looks up its header.
  * **Hit:** it emits the write header (`wrhdr_t`) two cycles after taking the
    packet header. It then forwards the payload at one word per cycle.
  * **Miss:** it raises `miss_valid` with the virtual address and waits. The
    processor searches its registered buffers and translates the address. It
    registers the page in the TLB (`tlb_reg_*`) and returns the physical
    address (`nios_cmd_*`). The controller then continues as for a hit, so
    later packets to that page hit.
  * After each packet it posts an `event_t` to the EQ FIFO. The `tlb_hit` bit
    of the event tells software which of the two paths was taken.
* One translation is made per packet, so a packet must not cross a page
  boundary.

## Links: word stuffing, credits and hidden diagnostics

This is the most involved part of the design. Each `apelink_channel` contains
a TX buffer (256 words), `apelink_tx`, `apelink_rx` and an RX buffer (1024
words). At 32 bytes per word that is 8 KB + 32 KB = 40 KB, which matches the
paper's memory budget per channel.

**Framing.** A word whose top 16 bits equal `CTRL_MAGIC` (`16'hBC5A`) is a
control word. Bits [239:232] give its type and bits [31:0] its payload:

| type | code | meaning |
|---|---|---|
| SOP | 01 | a packet starts |
| EOP | 02 | the packet ends; the previous data word was its last |
| ESC | 03 | the next word is data, even if it looks like a control word |
| CREDIT | 04 | payload[15:0] words were freed in the sender's RX buffer |
| DIAG | 05 | payload is a 32-bit fault-monitor message |

Word stuffing means that packet data never needs to be restricted: a data word
that happens to start with the magic costs one extra ESC word. The receiver
learns that a packet has ended only when EOP arrives. It therefore holds each
data word for one word time and attaches `last` when it sees EOP.

**Credits.** The transmitter starts with credits equal to the far RX buffer
size and spends one for each packet word. ESC, SOP and EOP cost no credit,
because they are not stored. When words are read out of the local RX buffer,
they are counted. The local transmitter reports the count in a CREDIT word
once 16 have gathered, or earlier if the link would otherwise be idle. The far
receiver decodes the CREDIT word and adds the count to its own transmitter.
Because of this, the receiver never stalls the link and never overflows. An
`overflow` flag and a framing `err` pulse are kept as checks and appear in
register `LINK_STATUS`.

**Priorities** per word slot are:

1. the held escaped word;
2. EOP;
3. credit return;
4. a diagnostic message;
5. SOP, or a data word.

CREDIT and DIAG words may fall inside a frame. This is how the fault
monitor's traffic is "hidden in the communication protocol".

The paper reports an efficiency of 0.784 for its own protocol. This encoding
does not claim to reproduce that number.

## LO|FA|MO: the mutual watchdog

`lofamo` counts watchdog periods. The period is set in `WD_PERIOD`, in clock
cycles; the reset value is 500 ms at 250 MHz.

* **Host check.** Host software must write `HOST_WD` at least once per
  period. If a whole period passes without a write, `host_fault` is set. It is
  cleared at the end of the first period that has a write again.
* **Card check.** The card increments a heartbeat in `APENET_WD[31:16]` every
  period. The host reads it to confirm the card is alive. Bit 0 of the
  register is the host-fault flag.
* **Messages to neighbours.** At every period a DIAG message
  `{15'b0, host_fault, heartbeat[15:0]}` is sent on every link.
* **Neighbour status.** From the messages it receives, the monitor records
  per link whether the neighbour's host is faulty (`NEIGH_STATUS[5:0]`). It
  also records whether the neighbour has gone silent for two consecutive
  periods (`NEIGH_STATUS[13:8]`), which means its card or link is dead.

With this information a neighbouring host can report a dead host or a dead
card elsewhere, for example over a service network to a master node. The
service network and the master node are not part of the card.

## Register map (`ext_regs`, 32-bit AXI4-Lite)

| addr | name | access | content |
|---|---|---|---|
| 0x00 | CTRL | rw | bit 0: host-bound stream from HOST RX (0) or NIOS FIFO (1) |
| 0x04 | HOST_WD | rw | host watchdog; every write is a heartbeat |
| 0x08 | APENET_WD | ro | {heartbeat[15:0], 15'b0, host_fault} |
| 0x0C | NEIGH_STATUS | ro | [13:8] neighbour silent, [5:0] neighbour host fault |
| 0x10 | WD_PERIOD | rw | watchdog period in cycles (reset 125 000 000) |
| 0x14 | TLB_STATS | ro | {misses[15:0], hits[15:0]} |
| 0x18 | TLB_FLUSH | wo | any write invalidates the TLB |
| 0x1C | LINK_STATUS | ro | [15:8] RX overflow, [7:0] framing error seen (sticky) |

A write is accepted when AW and W are both valid. The multiplexer switches
only between packets.

## Parameters (`apenet_top`)

| parameter | default | origin |
|---|---|---|
| N_LINKS | 6 | paper (six links) |
| N_ENG | 2 | paper (two DMA engines) |
| MAX_WORDS | 128 (4 KB packets) | own choice |
| TLB_ENTRIES | 32 | own choice (paper: "a limited amount") |
| PAGE_SHIFT | 12 (4 KB) | own choice |
| LINK_TX_DEPTH / LINK_RX_DEPTH | 256 / 1024 words | own split of the paper's ~40 KB per channel |
| HOST_FIFO_DEPTH / CTRL_FIFO_DEPTH | 64 / 16 | own choice |
| data width | 256 bits (`apenet_pkg::DATA_W`) | paper |

## What is not here

* **PCIe Gen3 controller and the QuickPCIe DMA engines 2-6.** The controller
  is vendor hard IP. The paper only names the DMA engines in its diagram. The
  core exposes their streams as ports: `host_*` goes to DMA engine 2,
  `cmd_*` comes from engine 3, `gpu_tx_*` from engine 4 and `eq_*` goes to
  engine 6. The two TX engines that the paper puts behind the AXI4 master are
  built here as `dual_dma`. They use a simple read-request/completion port
  instead of AXI4.
* **FIFO TARGET** appears in the diagram, but its function is not described,
  so it is not built.
* **The Nios II processor and its firmware** (buffer search, address
  translation, command preparation) are outside. Their interface is the
  `miss_*`, `nios_cmd_*`, `tlb_reg_*` and `nios_in_*` ports.
* **The torus router.** The paper refers to earlier work for it. Here a packet
  leaves on the link named by the `port` field of its header.
* **Transceivers** (7.0 Gbps x 4 lanes now, 14.1 Gb/s planned) are analog
  vendor parts. The `link_*` ports carry one 256-bit word per cycle.

## Departures and limits

* All word formats, the control-word encoding, the credit scheme, the register
  map, the fault rules (one period for the host, two for a neighbour), the TLB
  size and replacement policy, and all FIFO depths are this design's own.
* The RAM in front of FIFO HOST TX is used here as the DMA engines' reorder
  buffer. The paper shows it but does not say what it does.
* The paper's "Register Buffer" path into the TLB is folded into page
  registration: the TLB caches pages only.
* A packet cannot cross a page boundary on the receive side.
* The design has not been synthesized for an FPGA, and no timing at 250 MHz
  is claimed. The TLB's 32-way compare and the arbiters are combinational.

## Simulating

Every module has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if it hangs.
`tb/host_mem_model.sv` is a behavioural PCIe host memory used by the DMA
tests: it answers each read after a fixed latency and interleaves the
completions of different requests.

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/apenet_pkg.sv tb/tb_apenet_top.sv --top-module tb_apenet_top
./obj_dir/Vtb_apenet_top
```

Replace the testbench name to run the others: `tb_sync_fifo`, `tb_dual_dma`,
`tb_tlb`, `tb_rx_dma_ctrl`, `tb_apelink`, `tb_apelink_channel`,
`tb_pkt_arbiter`, `tb_lofamo` and `tb_ext_regs`.

`tb_apenet_top` connects two complete nodes at default parameters, link to
link, and runs through:

* messages on all six links, first missing and then hitting in the TLB;
* a GPU packet whose words must be escaped;
* twelve 4 KB messages into a receiver that is not accepting data, until the
  sender runs out of credits;
* a switch of the host-bound multiplexer to the NIOS FIFO;
* a host that stops its watchdog;
* a cut link.

It counts each of these mechanisms and fails if any of them never happened.
It builds in about 20 s and runs in well under a second.

Two more testbenches run the system-level experiments. Both use
`tb/apenet_node_model.sv`, which wraps one default-size `apenet_top` with a host
memory, a host that keeps the watchdog alive, and a processor model that
resolves TLB misses.

* `tb_quong_torus` builds a 4 x 4 x 1 torus of sixteen nodes, the shape of
  the QUonG cluster. Every node sends one message in X+ and one in Y+, and
  every payload is checked. Then the host of node 5 stops. A master polls the
  neighbour status of every node and must name node 5 and no other. With a
  watchdog period of 300 cycles, the failed host is known 302 cycles after
  its last write (1.0 periods). The published example is 0.9 s for a 500 ms
  period (1.8 periods). The difference is that `lofamo` flags a host after
  one silent period, not on a coarser schedule. The build takes about 45 s.
* `tb_link_bandwidth` joins two nodes by one link.
  * Latency sweep: one message at a time, 32 B to 4 KB, with a host memory
    latency of 100 cycles. One-way latency is 112 to 239 cycles.
  * Round trip: the same sizes as a ping-pong between host memories. It
    costs two one-way latencies plus about 2 cycles, for example 480 cycles
    for 4 KB. GPU-side round trips are not modelled, because the GPU's own
    read latency is outside the card.
  * Bandwidth: a 128 KB buffer sent as 32 back-to-back 4 KB messages. With a
    cold receiver TLB (one miss per page) it runs at 0.77 words per cycle. With
    a warm TLB it runs at 0.94 words per cycle, about 7.5 GB/s at 250 MHz.
  * Hidden diagnostics: the watchdog period is then cut to 150 cycles, so
    every link carries a diagnostic word that often. Both numbers stay the
    same: 239 cycles for 4 KB and 0.942 words per cycle. Diagnostic words
    use slots that data leaves free, as the paper claims for LO|FA|MO.
  * The TLB gain here (23%) is smaller than the paper's "up to 60%". The
    processor model answers a miss in about 35 cycles; the real Nios II
    takes far longer.
  * These numbers are in datapath cycles. The real link is slower: 28 Gbps
    per channel, against 64 Gbps for one 256-bit word per cycle at 250 MHz.
    So the cycle counts show the shape of the curves, not the published
    absolute values.
