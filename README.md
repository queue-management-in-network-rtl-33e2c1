# A hardware queue manager for network processors

A network processor that keeps a separate packet queue for each of
thousands of flows spends most of its time moving pointers around. With
software on the embedded RISC cores, that work uses up the processor at
a few hundred Mbps. This design moves all of it into hardware: a
*memory management system* (MMS) that stores packets and keeps per-flow
queues of them, for up to 32K flows at several Gbps.

Packets are cut into 64-byte **segments**. Segment data lives in an
external DDR DRAM. Each flow's queue is a singly linked list of segments,
and its pointers live in a separate external ZBT SRAM. The MMS carries
out *segment commands*: enqueue, dequeue, read, overwrite, delete, move
and a few combinations. It does the pointer work in the SRAM while the
data transfer to or from the DRAM runs in parallel.

The RTL follows a published architecture for such a queue manager. The
block structure, the command set, the segment size, the flow count and
the DRAM access scheduler follow that design. Widths, encodings,
handshakes, buffer depths, memory layouts and the order of pointer
accesses inside each command are this implementation's own choices. The
sections below point them out.

## Block structure

```
           port 1 IN ──► segmentation ─┐ data            ┌─► reassembly ──► port 4 OUT
  port 2 CPU (pkts) ──► segmentation ─┤──► wr_mux ──► DRAM ──► rd_demux ─┤
                           │ cmds     │                 ▲      └─► reassembly ──► port 3 CPU
                           ▼          │                 │             ▲  cmds │  backpressure
  port 3/4 cmds ───────► scheduler ──► DQM ───────► DMC ─┘             └───────┘
                                       │
                                     SRAM (queue table, next pointers, free list)
```

| Module | Role |
|---|---|
| `mms_pkg` | Widths, opcodes, status codes, command and access structs |
| `mms_segmentation` | Cuts a packet into 4-word segments, buffers the data and emits one command per segment (ports 1 and 2) |
| `mms_reassembly` | Command FIFO of a read port, plus a buffer that turns read segments back into a packet stream; raises backpressure (ports 3 and 4) |
| `mms_scheduler` | Picks the next command for the DQM from the four port FIFOs by fixed priority |
| `mms_dqm` | Data queue manager: executes commands on the linked lists in the SRAM and issues segment accesses |
| `mms_dmc` | Data memory controller: four access FIFOs and a bank-aware reordering scheduler in front of the DRAM |
| `mms_wr_mux`, `mms_rd_demux` | Connect the two segmentation buffers to DRAM write data, and DRAM read data to the two reassembly buffers |
| `mms_fifo` | First-word-fall-through FIFO used throughout |
| `mms_top` | Wires the above together; the SRAM and DRAM are outside |

The design has one clock. The data path is 128 bits wide, which is
64-bit DDR data on both edges, so a segment is 4 words ("beats"). The
published system runs the MMS at 125 MHz and the DDR at 100 MHz. This RTL
uses a single clock for both.

## The four ports

| Port | Direction | Carries |
|---|---|---|
| 1 `in_*` | In | Network packets. Every segment is enqueued to `in_flow`. |
| 2 `cpw_*` | In | Packets from the CPU with a data-carrying opcode (`cpw_op`): enqueue, enqueue at head, overwrite, overwrite & move. |
| 3 `cpc_*` / `cpr_*` | Both | CPU commands without data. Read and dequeue data comes back on `cpr_*`. |
| 4 `ouc_*` / `out_*` | Both | Dequeue commands for the output link. The packet stream comes back on `out_*`. |

All handshakes are valid/ready. The data ports use `*_eop` and a byte
count `*_bytes` for the last word. For packet ports the flow and opcode
are taken from the first word of the packet. Each command's end is
reported on `done_*`, with:

- the port;
- the opcode;
- the flow;
- a status: OK, EMPTY for a command on an empty queue, FULL when no free
  segment is left, or BADOP for a data opcode on a command port or the
  reverse;
- the clocks the command spent in the DQM.

A command that fails leaves the queues untouched. For a data command
that fails, its segment data is still removed from the segmentation
buffer ("dropped") without touching the DRAM.

## Segment commands

| Opcode | Effect on the queue of `flow` |
|---|---|
| `OP_ENQ` | Append a segment at the tail |
| `OP_ENQ_HEAD` | Insert a segment at the head |
| `OP_READ` | Return the head segment; the queue is unchanged |
| `OP_DEQ` | Return the head segment and free it |
| `OP_OVR` | Replace the data of the head segment |
| `OP_OVR_LEN` | Replace the head segment's length and end-of-packet flag (from the command) |
| `OP_DEL` | Free the head segment |
| `OP_DEL_PKT` | Free segments from the head up to and including the first end-of-packet segment |
| `OP_MOVE` | Unlink the head packet and append it to the queue of `dst` |
| `OP_OVR_LEN_MOVE` | `OP_OVR_LEN`, then `OP_MOVE` |
| `OP_OVR_MOVE` | `OP_OVR`, then `OP_MOVE` |

A move is only pointer work: the segments are not copied. A packet is a
run of segments that ends with one whose `eop` flag is set. Each segment
also keeps its length in bytes (1 to 64). The reassembly side uses the
length to drop the padding words of a short segment and to give the byte
count of the last word.

## Pointer memory and the DQM

The SRAM is 64 bits wide with byte enables and has a 2-clock read
latency (`SRAM_RD_LAT`). Its address is `{region, index}`:

- `{0, flow}`: queue-table word. Bits `[24:0]` hold the head segment,
  bit `[31]` the valid flag and bits `[56:32]` the tail segment.
- `{1, seg}`: segment descriptor. Bits `[24:0]` hold the next pointer,
  bits `[38:32]` the length and bit `[40]` the end-of-packet flag.

Byte enables let the DQM rewrite the head, or the tail and valid fields,
without a read-modify-write.

**Free segments** come from two sources:

1. A LIFO free list chained through the next fields of freed segments.
2. A high-water counter of segments that have never been used.

Because of the counter, nothing has to be written into the free list at
start-up. The only initialisation is clearing the valid bit of every
queue-table word: one SRAM write per flow, so 32768 clocks after reset
(`init_done`).

**Command execution.** The DQM runs one command at a time as a state
machine. Pointer reads are tagged and overlap where a command allows it.
The first pointer access of each command produces the segment number:

- for a write, the DMC access is issued as soon as the segment has been
  allocated;
- for a read, it is issued once the descriptor (length, eop) is known.

The DQM therefore never waits for the data to reach the DRAM. Latencies
below run from acceptance to `done`, with a DMC that never stalls. The
MOVE kinds and `OP_DEL_PKT` are shown for a 2-segment packet. The second
column is the published figure where one exists.

| Command | Clocks here | Published |
|---|---|---|
| Enqueue | 9 | 10 |
| Enqueue at head | 8 | – |
| Read | 11 | 10 |
| Dequeue | 13 | 11 |
| Overwrite | 7 | 10 |
| Overwrite length | 6 | 7 |
| Delete | 12 | 7 |
| Delete packet | 19 | – |
| Move | 21 | 11 |
| Overwrite length & move | 18 | 12 |
| Overwrite & move | 23 | 12 |

Enqueue, read, dequeue and overwrite length are within two clocks of the
published figures. Overwrite is faster here because it needs only the
queue-table read.

Delete, delete packet and the moves are slower. Delete waits for two
dependent SRAM reads (the queue table, then the head's next pointer)
before it can rewrite the head and free the segment. Delete packet and
the moves walk the packet's segments one SRAM read at a time to find its
last segment.

The reference keeps *packet* pointers in the SRAM as well as segment
pointers. That would find a packet's end in one access, but their
format is not described. This design keeps only segment pointers. This
is the main place where the RTL departs from the reference, and it
matters only for traffic heavy in moves and deletes.

**Backpressure.** A read port's reassembly buffer holds `BUF_SEGS`
segments. The DQM reserves a slot in it when it issues a read, and
releases the slot when the segment leaves the buffer. While a port's
stored plus reserved segments fill the buffer, the scheduler skips that
port's commands (`rd_mask`), so read data can never overflow.

## Data memory controller

This is the part of the design most worth understanding. The DRAM has
`BANKS` banks (8). A bank stays busy for 4 access cycles after it is
used. One access cycle is 4 clocks: one 64-byte segment, on a 128-bit
path. Accesses come in from four sources: two writers (IN, CPU) and two
readers (CPU, OUT). Served in arrival order, random traffic loses many
cycles to bank conflicts.

The DMC therefore keeps one FIFO per source (`QDEPTH` = 4). Once per
access cycle it considers only the four FIFO heads. A head is
**eligible** unless one of these holds:

- its bank is one of the banks used in the last `HIST` = 3 access
  cycles;
- it is a write and the previous access cycle was a read. A turnaround
  costs one cycle, so a write does not directly follow a read;
- an older access to the same segment is still waiting in another FIFO.
  This is the design's own rule. It keeps reordering from swapping a
  read and a write of one segment. Accesses carry a sequence number to
  tell their age.

Among eligible heads the DMC picks round-robin. If none is eligible the
cycle is lost, and `slot_pending && !slot_used` marks it. Dropped
accesses, the data of failed commands, pop their 4 words from the
segmentation buffer in a cycle of their own without a DRAM command.

The decision is made in the last clock of an access cycle. The DRAM
command goes out in the first clock of the next cycle, and write data
follows in 4 beats from the selected segmentation buffer through
`mms_wr_mux`. Read data comes back some clocks later. A small tag FIFO
sends each returning beat to the right reassembly port through
`mms_rd_demux`.

**Measured loss.** With all four FIFOs kept full of accesses to random
banks, the fraction of lost access cycles is:

| Banks | Measured here | Reference |
|---|---|---|
| 1 | 0.750 | 0.750 |
| 4 | 0.366 | 0.331 |
| 8 | 0.255 | 0.199 |
| 12 | 0.240 | 0.159 |
| 16 | 0.218 | 0.139 |

The losses cover both bank conflicts and read/write turnaround. The
reference figures are for the same reordering scheme. Plain round-robin
service loses 0.39 at 8 banks.

From 8 banks up, most of the loss here comes from the turnaround rule:

- after a read, a write has to wait one access cycle;
- when neither read FIFO has an eligible head, that cycle is lost.

The reference's DRAM model evidently charges turnaround less often, but
its timing is not given in enough detail to match. This is the second
place where the RTL departs from the reference. `tb_mms_dmc_banks`
reproduces the table.

## Throughput

The DMC can move one segment per 4 clocks, before losses. The command
rate is set by the DQM, one command at a time. An even enqueue/dequeue
mix averages about 11 clocks per segment: about 5.8 Gbps of segments at
125 MHz. The reference figure is 10.5 clocks, or 6.1 Gbps. Commands wait
in the port FIFOs, 4 per port here, while the DQM is busy.

## Parameters

| Parameter | Default | Where |
|---|---|---|
| `FLOW_W` / `NUM_FLOWS` | 15 / 32768 | `mms_pkg`, `mms_top` |
| `SEG_W` / `NUM_SEGS` | 25 / 2^25 (2 GB of 64-byte segments) | `mms_pkg`, `mms_top` |
| `DW`, `BEATS` | 128, 4 | `mms_pkg` |
| `BANKS` | 8 | `mms_top`, `mms_dmc` |
| `HIST`, `ACC_CLKS`, `QDEPTH` | 3, 4, 4 | `mms_dmc` |
| `SRAM_RD_LAT` | 2 | `mms_top`, `mms_dqm` |
| `BUF_SEGS` | 4 | `mms_top` (segmentation and reassembly buffers) |
| `PRIO` | IN > OUT > CPU write > CPU read | `mms_scheduler` |

The port priorities are a choice. The reference says only that ports
get different priorities.

## Simulating

Every testbench in `tb/` is self-checking. Each ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog. The SRAM and DRAM
are behavioural models:

- `tb/zbt_sram_model.sv`: sparse memory, read latency and byte enables;
- `tb/ddr_dram_model.sv`: segment-level memory that counts bank-busy and
  turnaround violations.

Example, with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/mms_pkg.sv rtl/mms_fifo.sv \
  rtl/mms_segmentation.sv rtl/mms_reassembly.sv rtl/mms_scheduler.sv rtl/mms_dqm.sv \
  rtl/mms_dmc.sv rtl/mms_wr_mux.sv rtl/mms_rd_demux.sv rtl/mms_top.sv \
  tb/zbt_sram_model.sv tb/ddr_dram_model.sv tb/tb_mms_top.sv --top-module tb_mms_top
./obj_dir/Vtb_mms_top
```

| Testbench | What it shows |
|---|---|
| `tb_mms_segmentation` | Segmenting, padding, command timing, one segment per 4 clocks |
| `tb_mms_reassembly` | Framing, byte counts, dropping of padding, backpressure |
| `tb_mms_scheduler` | Priority and masking against a reference |
| `tb_mms_dqm` | Every opcode against a linked-list model with free-list reuse; exact latency of each command |
| `tb_mms_dmc` | Random accesses against a reference memory; no DRAM timing violations; reorder, lost-cycle, turnaround and hold counts; the 8-bank loss; one access per 4 clocks for conflict-free traffic |
| `tb_mms_dmc_banks` | The lost-cycle table above: one controller per bank count under saturated random traffic (helper `dmc_loss_probe`) |
| `tb_mms_wr_mux`, `tb_mms_rd_demux` | Routing |
| `tb_mms_top` | All four ports at once against a queue model, with 16 flows, 40 segments and 2 banks, so that the pool runs out and reordering is frequent. It counts and requires pool exhaustion, empty queues, free-list reuse, backpressure, reordering, lost cycles, turnaround, same-segment holds, dropped data, bad opcodes, padding, arbitration and all 11 opcodes. |
| `tb_mms_full` | The top at its defaults (32K flows, 2^25 segments, 8 banks): the 32768-clock queue-table clear, then enqueue, read, CPU enqueue, dequeue and an empty dequeue |

## What is not here

- The SRAM and DRAM are external parts. The DRAM side is a
  segment-level interface (command, segment number, 4 data beats), not a
  DDR PHY with row and column commands or refresh. A real device needs a
  DDR controller behind `dram_*`.
- Appending a segment to the tail of a packet that is not the last in
  its queue is not offered. Enqueue appends at the queue's tail and
  enqueue-at-head inserts before its first packet.
- The latency-under-load figures of the reference depend on an arrival
  process it does not describe. They are not reproduced.
- The command rate, 5.8 against 6.1 Gbps, and the slower delete and
  move commands are discussed above.
