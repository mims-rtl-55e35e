# MIMS — a message-interface memory system in SystemVerilog

A conventional memory controller drives DRAM over a wide synchronous bus. It
issues every ACT, RD, WR and PRE itself, and every transfer is a whole 64-byte
line. MIMS breaks this coupling. The processor-side controller no longer
schedules DRAM. It packs memory requests into **message packets** and sends
them over a narrow point-to-point link to a **buffer scheduler** next to the
DRAM. Each request carries its own size (granularity, in 8-byte words) and can
carry more meaning: a timeout and a thread id. The buffer scheduler unpacks
the requests and schedules them on its DDR3 channel. It sends read data back
the same way, in read-return packets.

Two properties make the message interface pay off:

* **Fine granularity.** The DRAM behind each buffer scheduler is
  *sub-ranked*. Each rank of eight x8 devices is split into eight sub-ranks of
  one device each. A DDR3 burst of 8 on one x8 device is exactly 8 bytes, so a
  request for *k* words occupies only *k* devices. Requests on disjoint
  devices run at the same time.
* **Several requests per packet.** One packet head and one link frame are
  shared by up to 64 requests, which amortises the overhead. Read requests
  have a fixed size, so the receiver decodes them four at a time.

This RTL implements the whole digital path:

1. Core request ports.
2. Crossbar.
3. Read/write queues with write-drain water marks.
4. Packet generator.
5. Link layer.
6. Packet decoder.
7. FR-FCFS closed-page DDR3 scheduler over the sub-ranked channel.
8. Return buffer.
9. Read-return packets.
10. Request-id table that turns them back into core responses.

The top is `mims_top`: 16 cores, one memory controller and two buffer
schedulers, each with one DDR3 channel.

```
 cores ──► mc_crossbar ──► rw_queue ──► pkt_gen ──► link_tx ══ 16-bit link ══► link_rx ──► pkt_dec ──► ddr3_sched ══ DDR3 ══ DRAM
   ▲            (per buffer scheduler: one queue pair, generator, link pair, Data Buf)                      │
   └────────── data_buf ◄── pkt_dec ◄── link_rx ◄══ 16-bit link ══ link_tx ◄── pkt_gen ◄── return_buf ◄──┘
                                   memory controller (mem_ctrl)        buffer scheduler (buffer_sched)
```

## Messages and packets

All shared types and constants are in `mims_pkg`. Everything travels as
16-bit flits.

**Packet head** (one flit): `DBSID[15:12]` is the destination buffer
scheduler. `PT[11:10]` is the packet type: read, write or read-return.
`CNT[9:3]` is the number of messages. `RV[2:0]` is reserved.

**Request message, RTMSG** (80 bits, 5 flits, most significant flit first):

| bits    | field | meaning |
|---------|-------|---------|
| 79:32   | ADDR  | byte address (48 bits), 8-byte aligned |
| 31:28   | GY    | granularity in 8-byte words, 1..8 |
| 27:20   | TO    | timeout (carried, not used for scheduling) |
| 19:16   | TID   | thread/core id; the crossbar puts the core number here |
| 15:6    | RID   | request id, 10 bits |
| 5:0     | —     | reserved |

The packet types carry these messages:

* A **read packet** is the head followed by CNT RTMSGs.
* A **write packet** is the head followed, per request, by the RTMSG and
  GY×4 data flits. The data is sent least significant flit first.
* A **read-return packet** is the head followed, per read, by one flit
  `{RID[15:6], GY[5:2], 00}` and GY×4 data flits. Only the 10-bit request id
  comes back, not the 48-bit address. That saves three flits per returned
  read.

**Link frame.** `link_tx` wraps each packet as

```
START(k) SEQ payload... CRC(k) END(k)
```

Here (k) marks a control symbol: the link carries a k flag beside the 16 data
bits, as 8b/10b K-codes would. SEQ counts packets. CRC is CRC-16-CCITT: it
uses polynomial 0x1021, starts from 0xFFFF and covers SEQ and the payload,
MSB first. `link_rx` checks the framing, the sequence number and the CRC. It
reports each error as a one-clock pulse. The end of the payload is known only
when the CRC symbol arrives, so the receiver holds back one payload flit. That
flit leaves with `last` set in the same clock as the CRC. A bad packet is
delivered and flagged. There is no retry.

The link framing adds 4 flits (8 bytes) per packet. The table gives the
link cost of each request on top of that:

| request            | flits                |
|--------------------|----------------------|
| read               | 5                    |
| write of GY words  | 5 + 4·GY             |
| read return        | 1 + 4·GY             |

## Memory controller (`mem_ctrl`)

**Crossbar (`mc_crossbar`).** Address bit 6 selects the buffer scheduler, so
consecutive 64-byte lines alternate between the two channels. Each port
picks one core per clock in round-robin order. The request is tagged with the
core number in TID. On the way back, each core takes at most one response per
clock, and it arbitrates in round-robin order when both ports answer it.

**Read and write queues (`rw_queue`).** There are 64 + 64 entries per buffer
scheduler. Reads normally win. When the write queue holds more than 48
entries, the queue pair enters *drain* mode and only write packets are made.
Drain mode ends when the write queue falls below 16. Writes are also packed
whenever no read waits. The choice is frozen while the packet generator is
busy, so a packet holds one type only.

**Packet generator (`pkt_gen`).** When the link is free and the selected
queue is not empty, the generator takes n = min(count, 64) messages. It sends
the head and then the messages back to back. It pops the next message while
the last flit of the current one goes out, so there are no bubbles between
messages.

**Request ids (`data_buf`, the "Data Buf").** A read may enter the read queue
only if a request id is free. The id is allocated at that moment. The table
entry for the id records the core, the address and the granularity. After
reset, ids 0..1023 are handed out in order. After that they come from a free
list in the order they were returned. When a read-return message arrives,
the id is looked up and freed, and a response `{addr, gy, data}` goes to the
core through the crossbar. A granularity that does not match the one
recorded raises `err_gy`. Writes get no response.

## Buffer scheduler (`buffer_sched`)

The buffer scheduler chains these blocks:

1. `link_rx`
2. `pkt_dec`, which accepts read and write packets
3. `ddr3_sched`
4. `return_buf`
5. `pkt_gen`
6. `link_tx`

**Packet decoder (`pkt_dec`).** The decoder first checks the head. A packet
for another DBSID is consumed and dropped, with `err_dest`. A packet of a type
that this side does not accept gives `err_type`. A packet that ends early
gives `err_len`.

Read packets are decoded in **batches of four**. The decoder gathers up to
four raw 80-bit RTMSGs. Then one set of field masks splits them all in the
same clock: each field is ANDed with its mask and shifted. Up to four requests
leave together on `out_valid[3:0]`.

Write and read-return messages have variable length. They are decoded one at
a time. The decoder reads the GY field and then counts GY×4 data flits.

**DDR3 scheduler (`ddr3_sched`).** This is the hardest part of the design. It
has 32 request slots; up to four requests enter per clock. Each slot holds:

* rank, bank, row and column of the request;
* the **sub-rank mask**: the devices its words live on;
* its data.

The address map is:

| address bits | meaning |
|--------------|---------|
| [5:3]   | word in line = sub-rank (device) |
| [6]     | channel |
| [7]     | rank |
| [10:8]  | bank |
| [17:11] | column group in the row |
| [32:18] | row |

A request for GY words starting at word *w* uses devices w..w+GY-1. Bank
state is kept **per device**: open or closed, ACT-to-ACT (tRC), tRRD and a
four-ACT window (tFAW). Data-bus state is kept per device lane. Refresh is
kept per rank.

Each clock, at most one command is issued, in this priority:

1. **REF** for a rank whose refresh is due, once its banks are closed.
2. **RD/WR with auto-precharge** for the *oldest* slot whose row is open on all
   its devices. tRCD must have passed, and its lanes must be free for the
   burst (tCCD, read/write turnaround, tWTR).
3. **ACT** for the *oldest* slot whose banks are closed and ready on all its
   devices (tRC, tRRD, tFAW, tRFC).

This is FR-FCFS under a closed-page policy. Rows are never left open, so
"first ready" means: a request whose column command can go now beats any
activate, and age breaks ties. An age matrix (`older[i][j]`) orders the
slots. It is updated when requests enter, including four in one clock.

A column command drives only the sub-ranks in the slot's mask. Two requests on
disjoint devices therefore have their bursts in flight at the same time.

Write data is driven T_CWL clocks after the WR, two 64-bit beats per clock.
Each device lane carries its own word. Read data is captured T_CL clocks after
the RD from the same lanes. When a read is complete it goes to the return
buffer (`return_buf`, 16 entries), and from there into read-return packets.

## Timing

The whole design runs on one clock, treated as the DRAM clock. DDR3-1333
values from a common 2 Gb x8 part are used:

| parameter | clocks |
|-----------|--------|
| CL        | 10     |
| CWL       | 7      |
| tRCD      | 10     |
| tRP       | 10     |
| tRAS      | 24     |
| tRC       | 34     |
| tRRD      | 4      |
| tFAW      | 20     |
| tRTP      | 5      |
| tWR       | 10     |
| tWTR      | 5      |
| tCCD      | 4      |
| tRFC      | 107    |
| tREFI     | 5200   |

The faster link clock (2.7 GHz in the reference system) and the clock
crossings are not modelled. The link moves one flit per clock.

Latencies at the interfaces:

* The packet generator sends its head one clock after it sees a non-empty
  queue.
* The decoder releases a read batch one clock after its last RTMSG flit.
* A read returns about T_CL + 4 clocks after its RD command.
* A 1-word read costs 5 + 4 + 8 link flits on the way down (RTMSG, frame,
  head), with sharing between the requests of one packet.

## Parameters

| module | parameter | default | note |
|--------|-----------|---------|------|
| mims_top, mem_ctrl, mc_crossbar | NCORE | 16 | cores |
| mims_top, mem_ctrl, mc_crossbar | NUM_BS | 2 | buffer schedulers per controller |
| rw_queue | RQ_DEPTH / WQ_DEPTH | 64 / 64 | queue sizes of the reference system |
| rw_queue | WQ_HI / WQ_LO | 48 / 16 | drain water marks (own choice) |
| pkt_gen | MAX_REQ | 64 | messages per packet (own choice; CNT has 7 bits) |
| pkt_dec | BATCH | 4 | RTMSGs decoded in parallel |
| data_buf | NRID | 1024 | 10-bit request ids |
| ddr3_sched | NSLOT | 32 | request buffer (own choice) |
| return_buf | DEPTH | 16 | own choice |

The DRAM organisation is in `mims_pkg`: 2 ranks, 8 sub-ranks and 8 banks,
32768 rows and 1024 columns.

## Where this departs from the reference design

* **No address compression.** Every RTMSG carries the full 48-bit address.
  The base-delta schemes (a single base per packet, or a table of 8 bases with
  8- or 24-bit deltas) are not built.
* **FIFO packing.** Packets are filled from the head of a queue. The
  out-of-order, locality-aware grouping of requests is not built.
* **At most one line per request.** A request covers at most one 64-byte
  line. Merged "trunk" requests of up to 4 KB would have to be split before
  the crossbar.
* **TO is carried but not used.** The timeout field reaches the scheduler but
  does not change its order.
* **No ordering between a read and an earlier write to the same address.**
  The read may overtake the write in the scheduler. Consistency is left to the
  requester.
* **The link has no retry.** Errors are reported only.
* **One clock.** There is no SerDes and no clock-domain crossing.
* **Own choices.** The field widths, the link symbol encoding, the CRC, the
  water marks and the buffer sizes are this design's own choices.

## Files

* `rtl/`: one module, package or interface per file.
  * `mims_pkg`: types, constants, CRC, sub-rank masks.
  * `flit_if`: 16-bit valid/ready/last flit stream, with a hold assertion.
  * `mims_top`, `mem_ctrl`, `mc_crossbar`, `rw_queue`, `data_buf`, `pkt_gen`,
    `pkt_dec`, `link_tx`, `link_rx`, `buffer_sched`, `ddr3_sched`,
    `return_buf`.
* `tb/`: self-checking testbenches. Each prints
  `TB_RESULT checks=N failures=M`, and each has a watchdog.
  * `ddr3_dram_model` is a behavioural sub-ranked DDR3 channel. It gives each
    never-written burst a fixed hash of its location, and it counts every
    breach of the timing rules listed above.
  * `tb_mims_top` runs the whole system at its default size:
    * 16 cores write, mix, then read back their own regions;
    * every read's data is checked against a shadow copy;
    * it fails if any of these mechanisms never occurs: multi-request
      packets, write-drain mode, 4-wide decode, refresh, parallel sub-rank
      bursts, out-of-order returns, id reuse, back-pressure.
  * `tb_mem_ctrl` runs the same traffic with 4 cores and 64 ids.
* `tb_workloads` drives the full-size system with synthetic traffic shaped
  after each evaluated benchmark. Each shape takes that benchmark's average
  read and write granularity, read/write ratio, and irregular or streaming
  addresses. The test checks every read. For each benchmark it prints the
  clocks taken, the useful bytes per clock and the mean read latency. Every
  request is issued at once, so the latencies are mostly queueing time
  behind the 16-bit links.
  * `tb_buffer_sched`, `tb_ddr3_sched`, `tb_pkt_codec` (generator + decoder),
    `tb_link`, `tb_rw_queue`, `tb_data_buf`, `tb_mc_crossbar` and
    `tb_return_buf` test one block each.

To run a test with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/mims_pkg.sv rtl/flit_if.sv \
          tb/tb_mims_top.sv --top-module tb_mims_top -o sim
obj_dir/sim +verilator+rand+reset+2
```

The full-size test takes about 47,000 clocks and under a second.

## Tool notes

Verilator reports `SYNCASYNCNET` on `rst_n`. The flops use an asynchronous
reset, and the concurrent assertions use `disable iff (!rst_n)`. This is not
a circuit problem. The remaining lint warnings are unused bits of shared
structs: unused message fields in some paths, and timing constants that one
module does not need.
