# FpgaHub hub logic: an FPGA that runs the data paths of a server

A big-data server holds several kinds of devices: CPUs, GPUs, NVMe SSDs
and a network port. Usually the CPU coordinates all of them. It receives
every network message, posts every SSD command, and copies data between
devices. In this design an FPGA card on the PCIe bus does that instead.
The FPGA is also the server's network interface, so the work is started
by the network rather than by the CPU ("NIC-initiated"):

* A message arriving from the network is steered per flow. It goes whole
  to logic on the FPGA, or whole to CPU/GPU memory. Or it is split: the
  header goes to the CPU and the payload stays in the FPGA's own DRAM.
  The CPU then keeps the flexible, light control work and never touches
  the heavy payload.
* An outgoing message is reassembled by the FPGA. The header comes from
  CPU/GPU memory and the payload from FPGA memory. The CPU or GPU starts
  this with a single register store.
* The NVMe submission and completion queues of the SSDs live in the
  FPGA's on-chip memory. The SSDs fetch commands from there and write
  completions there by peer-to-peer PCIe. So the FPGA can issue and retire
  SSD commands with no CPU involved. A storage request that arrives over
  the network becomes an NVMe command, and its completion becomes a
  network response, entirely on the FPGA.

This repository is synthesizable SystemVerilog for the logic that sits
between the PCIe core, the network transport and the on-board memory. It
also has a self-checking testbench for each block. The PCIe core, the
Ethernet MAC, the transport protocol and the DRAM are not here. They
connect through the ports of the top module `fpgahub_top`.

## Blocks

```
             PCIe core (DMA + MMIO)                      network transport
   bar_* ─────► mmio_regs ──► descriptor_table ──┐
   (BAR hits)      │  └────► TX request queue ───┤
                   │                             ▼
                   │                       split_assemble ◄──── net_rx_* (messages in)
   c2h_*  ◄────────┼──────────────────────── (msg_split)  ─────► net_tx_* (messages out)
   h2c_*  ─────────┼───────────────────────► (msg_assemble)
   note_* ◄────────┼─────────────────────────    │   ▲
   memw_*/memr_* ◄─┼───────────────────────────► │   │ on-board memory (payloads)
                   │                             ▼   │
                   │                        nic_user_logic
                   ▼                             │   ▲
   ssd_db_* ◄── ssd_controller ◄─────────────────┘   │
                (N_SSD × nvme_queue_pair) ───────────┘
```

| File | Role |
|------|------|
| `fh_pkg.sv` | Shared types: beat width, descriptors, NVMe entry formats, storage message layout |
| `fpgahub_top.sv` | Wires the blocks together; exposes the PCIe, memory and network streams |
| `mmio_regs.sv` | BAR address decoder, TX doorbell and its request FIFO, statistics |
| `descriptor_table.sv` | One descriptor per flow, written by the host |
| `split_assemble.sv` | Receive split (`msg_split.sv`) and transmit assembly (`msg_assemble.sv`) |
| `ssd_controller.sv` | N_SSD queue pairs, command routing, doorbell and completion arbitration (`rr_arbiter.sv`) |
| `nvme_queue_pair.sv` | One on-chip NVMe SQ/CQ pair with its doorbells and completion capture |
| `nic_user_logic.sv` | Turns network storage requests into NVMe commands and completions into responses |
| `sync_fifo.sv` | Small FIFO for doorbell requests |

Every interface is a valid/ready handshake. Data moves in 64-byte beats
(512 bits): one beat is one message-stream word, one DMA word and one
on-board memory word. Reset is asynchronous and active low, and it
clears all state.

## Flows and descriptors

Every message carries a 4-bit flow number, so there are 16 flows. Each flow
has a descriptor that the host writes through the BAR. The first beat of a
message looks up its flow's descriptor, and the descriptor is held until
the message's last beat, so a descriptor can be rewritten between
messages without tearing one.

| Field (word) | Bits | Meaning |
|---|---|---|
| 0 | [1:0] | destination: 0 user logic, 1 PCIe (whole message), 2 split |
| 0 | [15:8] | header size in beats (split only) |
| 1 | [63:0] | PCIe byte address for the header or the whole message |
| 2 | [63:0] | on-board memory beat address of the flow's payload ring |
| 3 | [15:0] | payload ring size in beats (0 means 65536) |

Because the header size is set per flow, each application chooses how
much of its messages the CPU sees.

## Receive: splitting a message (`msg_split`)

`msg_split` has no buffer. Each beat is passed straight to the output that
its descriptor selects, in the same cycle, and waits (holding `in_ready`
low) while that output is not ready.

* **User logic**: all beats go to `nic_user_logic`.
* **PCIe**: beat *i* is DMA-written to `host_addr + 64*i`.
* **Split**: the first `hdr_beats` beats are DMA-written like that. The
  rest are written to on-board memory at the flow's ring pointer, which
  wraps at the ring size. The ring pointer is per flow and survives
  between messages. The software that consumes the payloads must
  release ring space in time; the hardware does not track space.

On the last beat of a PCIe or split message, a notification (`note`)
carries the flow, the total, header and payload lengths, and the payload's
address in on-board memory. The last beat is accepted only together with
its notification, so the host never sees a notification for data that is
not yet written. Header DMA writes are bursts; `c2h_last` marks the last
header beat.

## Transmit: assembling a message (`msg_assemble`)

There are two sources of outgoing messages:

1. Messages from the user logic (storage responses), passed through
   whole.
2. Assemble requests from the host. A request names the flow, the header
   (PCIe address and length in beats) and the payload (on-board memory
   address and length). The assembler issues one DMA read for the header
   and one memory read for the payload. It streams both out as one
   message, with `net_tx_last` on the final beat. A header-only request
   sends a message held entirely in CPU/GPU memory. A payload-only
   request sends one held entirely in FPGA memory. A request with neither
   is discarded.

The two sources alternate (round robin) at message boundaries.

**Doorbell.** The host fills two address registers and then writes the
doorbell word. That one store queues the request, so a GPU kernel or CPU
thread needs a single store per message once the addresses are set. The
request FIFO holds `TXQ` (8) requests. A doorbell store to a full FIFO is
held off by `bar_ready` until a slot frees; it is never dropped.

## Driving SSDs from the FPGA (`nvme_queue_pair`, `ssd_controller`)

This is the least obvious part of the design. An NVMe SSD normally reads
commands from a submission queue (SQ) in host DRAM and writes completions
to a completion queue (CQ) in host DRAM, and the CPU polls that CQ. Here
both rings of one I/O queue pair per SSD sit in FPGA block RAM, exposed
through the FPGA's BAR. The host driver creates the I/O queues once,
giving the SSD those BAR addresses as the queue base addresses. That
admin step is not in this RTL. From then on the SSD's own DMA engine
reads 64-byte SQ entries and writes 16-byte CQ entries as PCIe
peer-to-peer accesses. They arrive at the FPGA on the same MMIO path as
host register accesses, and `mmio_regs` routes them to the SSD
controller (BAR region 3).

One command's life in a queue pair:

1. **Submit.** The user logic offers a command. If fewer than DEPTH−1
   commands are outstanding, the pair writes the 64-byte entry at the SQ
   tail and advances the tail. The entry is in the standard NVMe layout:
   opcode, CID, namespace, PRP1/PRP2, starting LBA, block count.
2. **SQ doorbell.** The new tail is written to the SSD's doorbell register
   (`BAR0 + 0x1000 + 8·qid`, qid 1) through `ssd_db_*`. This port is the
   FPGA acting as PCIe master. Doorbells are coalesced: while a doorbell
   waits for the port, further commands only move the tail, and one write
   covers them all.
3. **Fetch and transfer.** The SSD reads the entry and moves the data with
   its own DMA. PRP1 is a plain PCIe address, so the data buffer can be in
   CPU memory, GPU memory or FPGA memory with no change to the hub.
4. **Complete.** The SSD writes a CQ entry. An entry is new when its
   phase bit matches the phase the queue pair expects. The expected phase
   starts at 1 and flips each time the CQ head wraps, as in NVMe. Fresh
   RAM reads as phase 0 because the valid bits reset to 0. The pair sees
   a new entry in the cycle after it is written, with no polling of
   host memory.
5. **Retire.** The completion goes to the user logic. The CQ head
   advances and the new head is written to the CQ head doorbell
   (`+4`), again coalesced.

**Command ids.** An SSD may complete commands in any order. So the CID is
not the SQ slot. It comes from a pool of free ids (lowest free first) and
returns to the pool when its completion is handed on. The limit of DEPTH−1
outstanding commands keeps the SQ from overrunning its head and the CQ
from overflowing, and it guarantees that a free id exists.

**Many SSDs.** `ssd_controller` has one queue pair per SSD (N_SSD = 10). It
routes each command by its SSD index and merges the pairs' doorbells and
completions with round-robin arbiters. In the BAR, SSD *s* owns a window of
2·64·DEPTH bytes (8 KB at DEPTH 64) at `s·8 KB` in region 3: SQ entry *i* at
`64·i`, CQ entry *i* at `4096 + 16·i`. The host writes each SSD's BAR0 PCIe
address into region 2 during set-up.

## Storage requests from the network (`nic_user_logic`)

A flow whose descriptor says "user logic" carries storage requests. Only
the first beat of a request is read:

| Bits | Field |
|---|---|
| [7:0] | NVMe opcode: 0x02 read, 0x01 write |
| [15:8] | SSD index |
| [31:16] | request id |
| [47:32] | number of blocks − 1 |
| [127:64] | starting LBA |
| [191:128] | PRP1 (data buffer PCIe address) |
| [255:192] | PRP2 |

The block issues the command to namespace 1 and stores (flow, request id)
under (SSD, CID). When the completion arrives, it sends one response beat
on the same flow: `[7:0]=0x80`, `[15:8]` SSD, `[31:16]` request id,
`[46:32]` NVMe status. Requests with another opcode or an SSD index out of
range are dropped and counted. One request waits in a register while the
SSD's queue is full; the message stream stalls behind it.

## BAR map

The region is set by bar address bits [23:20]. All registers are 64-bit
words.

| Region | Offset | Access | Content |
|---|---|---|---|
| 0 | `{flow, field, 3'b000}` | R/W | descriptors |
| 1 | 0x00 | W | header PCIe address for the next request |
| 1 | 0x08 | W | payload memory beat address for the next request |
| 1 | 0x10 | W | doorbell: `[3:0]` flow, `[23:16]` header beats, `[47:32]` payload beats |
| 2 | `8·s` | W | BAR0 address of SSD *s* |
| 3 | `8 KB·s + …` | R/W | NVMe queues (SSD peer-to-peer accesses) |
| 4 | `8·k` | R | 32-bit counter *k* |

The counters, in order k = 0…12:
0 messages received;
1 messages to the user logic;
2 messages assembled from host requests;
3 SSD commands;
4 completions;
5 doorbells written;
6 full-queue stalls;
7 commands outstanding;
8 storage requests;
9 responses;
10 dropped requests;
11 doorbell stores held off;
12 doorbell stores.

A read answers one cycle after it is accepted. Write data is 128 bits wide
so that an SSD's 16-byte completion entry arrives in one access.

## Parameters

| Parameter | Default | Where |
|---|---|---|
| `N_SSD` | 10 | top, SSD controller, user logic: SSDs driven at once |
| `DEPTH` | 64 | entries per SQ and per CQ |
| `TXQ` | 8 | queued assemble requests |
| `DATA_W`, `FLOW_W` | 512, 4 | `fh_pkg`: beat width, flow number width |

The SSD count of 10 is the configuration the design was sized for. The
other values are this design's choices. At the defaults, synthesis gives
about 6.5 k flip-flop bits and 239 kbit of memory, mostly the 10 × 64 SQ
entries of 512 bits.

## Simulating

Each block has a testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<m>` and ends. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
  --top-module tb_fpgahub_top rtl/fh_pkg.sv tb/tb_fpgahub_top.sv
./obj_dir/Vtb_fpgahub_top
```

Replace the testbench name to run another one. Add
`+verilator+rand+reset+2` at run time to start every unreset variable at a
random value.

| Testbench | What it covers |
|---|---|
| `tb_descriptor_table` | random writes/readback of all flows and fields, lookup, reset |
| `tb_split_assemble` | all three destinations, ring wrap, header-only / payload-only / empty requests, back-pressure on every output |
| `tb_mmio_regs` | region decoding, doorbell queuing and hold-off when full, statistics readback |
| `tb_nvme_queue_pair` | SSD model fetching entries, completions in reverse order, phase wrap, CID reuse rule, doorbell coalescing, full queue |
| `tb_ssd_controller` | 3 SSDs with per-SSD models, routing, arbitration, random completion order |
| `tb_nic_user_logic` | request parsing, tag table, responses, dropped requests, stall |
| `tb_fpgahub_top` | whole hub at default parameters (10 SSDs, depth 64) |
| `tb_ssd_workload` | 4 KB random storage requests against ten SSDs through the whole hub; measures the command rate |

`tb_fpgahub_top` models the host, ten SSDs, the DMA engine, the on-board
memory and the transport. It runs 270 storage requests (4 KB random reads
and writes across the ten SSDs) and one malformed request. SSD 0 is held first so that its queue
fills and stalls. It then runs PCIe and split messages, and sends every
split message back out by doorbell. Finally it stalls the network so that
the doorbell FIFO fills. It counts and requires each mechanism: payload
to memory, DMA to the host, full-queue stall, doorbell hold-off,
coalesced SQ doorbells, CQ phase wrap, a dropped request and reassembled
messages. It finishes in well under a second.

`tb_ssd_workload` asks whether the hub keeps ten fast SSDs busy. Such a
set saturates at about 25 GiB/s of 4 KB requests, which is 6.55 M
commands/s, or 0.033 commands per cycle at 200 MHz. Each command costs the
hub one SQ-entry read and one CQ-entry write on its single BAR port, so
the hub alone manages 0.5 commands per cycle. The testbench measures
exactly 0.500 with SSDs that answer at once. With SSDs that take 80 µs
(16 000 cycles) per command, the limit becomes the queue depth: 10 × 63
commands in flight give at most 0.039 commands per cycle. The testbench
measures 0.039 with 624 in flight, even though one request waiting for a
full SSD blocks the requests behind it. At DEPTH 32 the same latency would
allow only 0.019, too little. The 200 MHz clock and the 80 µs latency are
typical values, not measured ones.

## Where this design departs from, or adds to, the source design

The block split, the on-chip NVMe queues with the five-step command flow,
the per-flow header size, and the header-to-CPU / payload-in-FPGA split
all follow the FpgaHub proposal. So do the single-store doorbell and the
ten-SSD configuration. The proposal describes these at the level of what
they do. Everything below is this RTL's own choice:

* All formats: descriptor fields, BAR map, doorbell word, notification
  and storage-request messages. Also the 64-byte beat and the 16 flows.
* Queue depth 64, CID pool, doorbell coalescing, round-robin arbitration.
* The payload ring in on-board memory, and the rule that ring space is
  software's business.
* In the proposal the user logic also keeps application state in the
  on-board memory. Here the on-board memory ports belong to
  split/assemble, and the user logic keeps its small tag table on chip.
* The proposal's doorbell starts a collective operation. Collectives are
  not built, so the doorbell here starts a message assembly.
* The proposal quotes 45 K LUT, 109 K FF, 164 BRAM and 2 URAM for its
  10-SSD control logic on an Alveo U50. This RTL was not tuned to match.

## Not in this RTL

* The PCIe core with its DMA engine and MMIO interfaces, and the 100G
  Ethernet MAC. These are vendor IP.
* The reliable network transport. Its message stream is the
  `net_rx_*`/`net_tx_*` interface.
* The on-board DRAM/HBM and its controller. `memw_*`/`memr_*` are a
  simple beat-addressed port.
* Collective-communication offload, and payload processing engines
  such as compression.
* NVMe admin commands: creating the I/O queues and identifying
  namespaces. The host driver is assumed to have done them.
