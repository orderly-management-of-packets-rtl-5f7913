# Eunomia: an ordering layer for RDMA NICs

RDMA over Converged Ethernet (RoCEv2) assumes that the packets of a
connection arrive in order. An out-of-order packet is treated as a loss: the
receiver NACKs it and the sender goes back and re-sends. This keeps RDMA off
networks that reorder by design: per-packet load balancing, multi-path
expander topologies, flow scheduling, deflection. Eunomia is a small block on
the NIC that accepts out-of-order packets, places them in memory and keeps
track of what is still missing. The transport's in-order rules are then met
without a retransmission.

The difficulty is memory. A NIC has little on-chip SRAM and thousands of
connections, so a fixed bitmap per connection is either too small to absorb
real reordering or too expensive. Eunomia gives a connection no bitmap at all
until its first out-of-order packet. It then starts with one 16-bit block and
adds blocks one at a time as the reordering gets deeper, up to a cap of 256
packets. Every block and every piece of per-connection state lives in one
shared memory of 2-byte words. The engine that updates the bitmaps keeps
nothing of its own between packets.

This repository holds synthesizable SystemVerilog for both halves of one NIC,
with a self-checking testbench for every module and an end-to-end test.

## Block structure

```
                  transmit                                  receive
 transport --tx_in--> eunomia_sender_agent --tx_out--> wire --rx_pkt--> eunomia_pkt_driver --ack_out--> peer
 transport <--hooks-- (sack / recover / ack_fwd) <--ack_in-- peer              |    ^        --cn-->  host
                                                                      hd_req   |    | hd_rsp
                                                                               v    |
                                                           eunomia_hd_bitmap  x NUM_HDBM
                                                                               |  mc_req / mc_rsp
                                                                      eunomia_mc_arbiter
                                                                               |
                                                                      eunomia_mem_ctrl
                                                          (master_array, block_alloc_bitmap,
                                                                metadata_start_index)
```

`eunomia_top` wires these together. The RoCEv2 transport, the wire and the
host-memory DMA are outside; their connections are the top's ports. Shared
types live in `eunomia_pkg`.

| file | role |
|---|---|
| `rtl/eunomia_pkg.sv` | packet, descriptor, acknowledgement and request types; constants |
| `rtl/eunomia_sender_agent.sv` | adds the metadata, holds the final WRITE packet, turns ACK/SACK/NACK into transport hooks |
| `rtl/eunomia_pkt_driver.sv` | first stop of every received packet: fast path, bitmap creation, ACK/SACK/NACK, completion |
| `rtl/eunomia_hd_bitmap.sv` | hybrid-dynamic bitmap engine, one packet at a time |
| `rtl/eunomia_mc_arbiter.sv` | round-robin sharing of the memory controller among engines |
| `rtl/eunomia_mem_ctrl.sv` | the three arrays, space search, address translation, freeing |
| `rtl/eunomia_top.sv` | one NIC: both halves |

## What travels on the wire

The sender adds 33 bits to every data packet (`pkt_t`):

* `first_seq` (32 bits): the first sequence number of the message. The
  receiver uses it as the start of the bitmap when the very first packet
  it sees is already out of order. At that point it has no other way to
  know where the message begins.
* `last` (1 bit): this is the final packet of the message. The receiver
  records its sequence number as *Last Seq*.

The receiver answers every packet with one `ack_t`:

| kind | meaning | carries |
|---|---|---|
| ACK  | in order (or a duplicate); everything below `expected` has arrived | `expected` |
| SACK | out of order, but recorded in the bitmap; the payload is kept | `expected`, `seq` |
| NACK | out of order and could not be recorded (bitmap cap or memory full); the payload is dropped | `expected`, `seq` |

## Transmit side: `eunomia_sender_agent`

* The first packet of a connection teaches the agent its first sequence
  number. Every packet leaves with that number and the last flag.
* **Final packet of a WRITE.** A one-sided WRITE has no completion event
  at the receiver. An application typically polls a flag in the last
  bytes, so that packet must not be placed before the rest. The agent
  therefore parks the final packet of a WRITE in one of `HOLD_SLOTS`
  slots. It releases the packet once the cumulative acknowledgement equals
  its sequence number, that is, once everything before it has arrived in
  order. Released packets go out ahead of new ones. Other connections keep
  flowing while packets are held. When every slot is full, a further final
  WRITE packet stalls `tx_in`.
* **Acknowledgements.** ACK and SACK update the connection's cumulative
  value and are forwarded as `ack_fwd_*`. A SACK also raises `sack_*`, so
  a selective-repeat transport can mark the packet received. A SACK never
  triggers recovery. A NACK raises `recover_*` with the sequence number to
  recover from.
* A connection is closed when the cumulative acknowledgement passes its
  final packet. The same ID may then start a new message.

Throughput is one packet per cycle, with no added latency on the data path.

## Receive side: `eunomia_pkt_driver`

For each connection ID (256 by default) the driver keeps an active bit, a
"seen" bit, the expected sequence number, `conn_module_valid` (the
connection has a bitmap) and `conn_to_module_map` (which engine owns it).
Every packet takes one of four ways, and a termination request takes a fifth:

1. **Connection has a bitmap:** the packet goes to its engine, and the
   engine's result becomes the answer.
2. **In order** (`seq == expected`): ACK with `expected + 1`, in the same
   cycle and without touching memory. If the packet is the final one, a
   completion notification (`cn_valid`) goes to the host. Most connections
   never leave this path.
3. **Duplicate** (`seq < expected`, including late copies after the
   connection completed): ACK with the current expected value.
4. **First out-of-order packet:** an engine is chosen in round-robin order
   and recorded in the map, and the packet is sent with `create = 1`. The
   new bitmap starts at `expected`. If this is the connection's first
   packet, it starts at the packet's `first_seq` instead.

5. **Termination** (`term_valid`, `term_conn`): the host ends a
   connection before its last packet. If the connection has a bitmap, the
   request goes to its engine, which frees the bitmap and the metadata.
   That result answers no packet. In every case the driver then forgets the
   connection, so the ID can start afresh with any sequence numbers.
   Termination goes ahead of packets.

Engine results have priority over new packets: in a cycle that returns a
result, `pkt_ready` is low. A result updates `expected` from the engine's
Head. A result marked *freed* clears `conn_module_valid`, and the
connection is back on the fast path. A result marked *complete* raises
`cn_valid`. For a SEND/RECV message this is the held-back completion: the
host learns about the message only once all of it is in place.

## The hybrid-dynamic bitmap: `eunomia_hd_bitmap`

This is the heart of the design and the least obvious part.

### Geometry

A connection's bitmap is a list of 16-bit rows (*blocks*), numbered 0 to
D-1 (*Dynamic Size*). Rows 0 to C-1 (*Circular BM Size*) form a ring; rows
C to D-1, if any, are a linear extension. Five state values describe it:

| state | meaning |
|---|---|
| Head | first sequence number not yet received in order |
| Head BM ID, Head BM Index | row and bit that Head occupies in the ring |
| Tail | last sequence number the ring can hold, `Head + 16*C - 1` while there is no extension |
| Last Seq | sequence number of the final packet, all ones while unknown |

A sequence number `s` is placed as follows:

* `Head <= s <= Tail`: in the ring, at bit `(HeadPos + (s - Head)) mod 16*C`,
  where `HeadPos = 16*HeadBmId + HeadBmIndex`.
* `s > Tail`: in the extension, at offset `s - Tail - 1` counted from bit 0
  of row C.
* `s < Head`: already delivered; answered ACK.

### Per-packet steps

1. **Create** (first out-of-order packet only): reserve the metadata
   region and row 0. Head = expected, Tail = Head + 15, C = D = 1.
2. **Load** the eight state words.
3. **Place.** If `s` lies beyond the last row, add rows one at a time until
   it fits. If that would need more than `MAX_BM_BLOCKS` rows (256 packets
   past the ring's Tail side), or the memory is full, answer NACK and
   change nothing. Otherwise set the bit.
4. **Flush.** If `s == Head`, the answer is ACK, and the run of ones
   starting at Head is cleared, one row per read-modify-write. Head moves
   past the run and wraps around the ring. With no extension, Tail moves
   along with Head, so the ring always covers 16*C numbers from Head.
   With an extension, Tail stays put, because the extension's offsets are
   counted from it.
5. **Merge.** When the flush empties the ring (Head = Tail + 1) and there
   is an extension, the extension is absorbed. Head moves to row C, bit 0
   (exactly where `Tail + 1` was stored). C becomes D, and Tail becomes
   Head + 16*D - 1. The flush then continues into the former extension.
   The ring is now bigger, and the connection keeps the larger size while
   the reordering lasts.
6. **Complete.** If Last Seq is known and Head = Last Seq + 1, every block
   of the connection is freed (garbage collection) and the result is
   marked *complete* and *freed*. A termination request skips steps 2–5:
   it reads only the sizes word, then frees everything.
7. **Store** the eight state words; return the result.

If `s != Head`, the answer is SACK.

### Worked example

Head = 1, so the ring is row 0 with seq 1..16 and Tail = 16.

| packet | action | state afterwards |
|---|---|---|
| 6  | ring bit 5 | SACK |
| 20 | beyond Tail: offset 3, add row 1 (D = 2) | SACK |
| 40 | offset 23: add row 2 (D = 3), row 2 bit 7 | SACK |
| 1..5 | 1 == Head: flush 1..6 | Head = 7, Tail stays 16 |
| 7..16 | Head reaches 17 = Tail + 1: merge | Head at row 1 bit 0, C = D = 3, Tail = 64 |
| 17..19 | flush 17..20 | Head = 21 |

The unit testbench runs a longer version of this example step by step.

### Why the engine keeps no state

All connection state sits in the memory controller. One engine can
therefore serve any number of connections, and more engines (`NUM_HDBM`)
can be added for throughput without duplicating per-connection storage.
The cost is memory traffic: every packet reads and writes eight state
words.

### Timing

A packet in a reordered connection takes about 60 cycles. The breakdown is
8 state reads, 1 set-bit and 8 state writes, at 2–6 cycles per controller
operation. Each added row adds 4–5 cycles. Each flushed row adds a read
and a write (about 10 cycles). The engine takes one packet at a time.

## Memory controller: `eunomia_mem_ctrl`

Three arrays:

* **master_array:** `NUM_BLOCKS` (1024) words of 2 bytes each, single port,
  registered read. It holds metadata and bitmap rows alike.
* **block_alloc_bitmap:** one bit per word, set while the word is in use.
* **metadata_start_index:** `META_SLOTS` (42) entries of {valid, 1-byte
  connection ID, start index}. This is a small content-addressed table
  that maps a connection to its metadata region.

### A connection's metadata region

24 consecutive words (48 bytes):

| word | contents |
|---|---|
| 0, 1 | Head (low, high) |
| 2, 3 | Tail |
| 4, 5 | Last Seq |
| 6 | {Head BM ID, Head BM Index} |
| 7 | {Circular BM Size, Dynamic Size}, in blocks |
| 8 | absolute address of bitmap block 0 |
| 9..23 | address of bitmap block k minus the address of block 0 (mod 1024), for k = 1..15 |

Storing block 0's address plus differences is the layout the design
follows for the block addresses. With a 1024-word array, each entry fits
in one word.

### Finding space

* A **metadata region** is searched backward, from the top of the array
  downward, for 24 consecutive free words. A single combinational pass
  counts the run of free words below each position.
* A **bitmap block** is the lowest free word, searched forward from address
  0.

Metadata thus collects at the top of the array and bitmap blocks at the
bottom, which keeps the 24-word holes from being broken up by single blocks.

### Operations

One request at a time, `req_valid/req_ready` in and a one-cycle `rsp_valid`
pulse out. Latency is counted from the accepting edge to the response
pulse:

| op | does | cycles |
|---|---|---|
| INIT | reserve a region and a table entry (fails if none) | 2 |
| ALLOC k | take a free word, clear it, record its address as block k | 3 (k = 0), 4 |
| RD_STATE / WR_STATE i | state word i | 3 / 2 |
| RD_BM / WR_BM k | row k, through the address table | 5–6 / 4–5 |
| SET_BIT k, b | read-modify-write of row k | 5–6 |
| FREE n | release n bitmap blocks, the region and the table entry | 3 + n |

Freeing only clears allocation bits; data is cleared when a block is next
allocated. An operation on a connection with no region answers `ok = 0`.
`used_blocks` and `used_slots` report occupancy.

### Capacity at the defaults

24 words of metadata per reordered connection plus 1–16 blocks of bitmap.
At most 42 connections can have a region at once (42 × 24 = 1008 words),
which leaves 16 words for bitmaps. At most 25 can hold a full 256-bit bitmap
at once (25 × 40 = 1000). A connection that finds no space is answered
NACK and stays on the fast path; its later packets try again.

## Sharing the controller: `eunomia_mc_arbiter`

With more than one engine, the engines share the controller through a
round-robin arbiter. The arbiter grants one engine, keeps the grant until
the controller responds, and steers the response back. At the default of
one engine it is a pass-through with a busy flag.

Two limits apply to extra engines:

* The controller handles one request at a time, so it stays the shared
  bottleneck.
* The driver takes packets in arrival order. A packet whose engine is busy
  holds up the packets behind it, even those for the other engine.

In the end-to-end test with two engines, both engines are busy at once
about a third of the time. The run finishes in about 11% fewer cycles than
with one engine.

## Parameters

| parameter | default | where |
|---|---|---|
| `NUM_CONN` | 256 (1-byte connection ID) | top, driver, sender |
| `NUM_HDBM` | 1 HD bitmap engine | top, driver |
| `NUM_BLOCKS` | 1024 words of 2 bytes | top, memory controller |
| `META_BLOCKS` | 24 words per region | top, memory controller |
| `META_SLOTS` | 42 regions | top, memory controller |
| `MAX_BM_BLOCKS` | 16 blocks (256 packets) | top, engine |
| `HOLD_SLOTS` | 4 held WRITE packets | top, sender |

`META_BLOCKS` must be at least `8 + MAX_BM_BLOCKS`. The bitmap block width
(16 bits, equal to the word width) and the 32-bit sequence numbers are
package constants.

Synthesized at the defaults (generic yosys cells), the top is about 15,900
cells and 3,000 flip-flops, plus 50,852 bits of memory, mostly the master
array. Most of the cells are the memory controller's one-cycle searches over
the 1024-bit allocation bitmap.

## Where this design makes its own choices

The ordering algorithm, the sizes above (except `META_SLOTS` and
`HOLD_SLOTS`), the three arrays, the search directions, the relative block
addresses, the creation of a bitmap only on the first out-of-order packet
and the rules for ACK/SACK/NACK follow the Eunomia design. The following
are this implementation's own:

* the word order of the state variables and the controller's operation set
  and handshake;
* one controller request at a time, and a full load and store of the state
  on every packet;
* the merge step exactly as described above;
* NACK when memory runs out, as well as at the cap;
* duplicates (below Head or below expected) answered ACK;
* `expected` kept in the driver rather than read from the transport's
  queue pair;
* round-robin engine choice and the arbiter;
* how a termination reaches the design (a request port at the driver);
* the number of hold slots, and the sender learning a connection's first
  sequence number from its first packet;
* a completed connection ID may start a new message. Sequence numbers are
  assumed to keep rising from one message to the next, which is how late
  duplicates are recognised.

Not built: the RoCEv2 transport itself (recovery, queue pairs), the DMA that
places payloads in host memory, and engine updates triggered by a timer
rather than a packet. The bitmap cap is fixed: an uncapped bitmap would need
an unbounded address table.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it does |
|---|---|
| `tb_eunomia_mem_ctrl` | search order of regions and blocks, address translation, bit setting, exact latencies, freeing and reuse, region and block exhaustion |
| `tb_eunomia_hd_bitmap` | engine plus a real controller against a sequence-level model: the worked example with growth, merge and completion; the cap and NACK; 600 randomly reordered packets on 4 connections; running out of memory at 40 connections |
| `tb_eunomia_mc_arbiter` | three random masters, response routing, fairness |
| `tb_eunomia_pkt_driver` | fast path at one packet per cycle, creation and round-robin mapping, ACK/SACK expected values against a model, one CN per connection, stalls (with ideal engines in the testbench) |
| `tb_eunomia_sender_agent` | metadata, WRITE hold and release, SEND not held, SACK/NACK/ACK hooks, reopening, stall on full hold slots |
| `tb_eunomia_top` | whole NIC at default parameters, looped through a model network |
| `tb_eunomia_top_multi` | the same with two bitmap engines sharing the controller |
| `tb_eunomia_mem_util` | memory use with 20 concurrent connections, receive side at default parameters |

The end-to-end test drives 24 connections with two messages each, half of
them WRITEs. The network delays each packet at random (0–400 cycles, a few
2,000–6,000), drops 0.5% of packets, and feeds acknowledgements straight
back. A transport model re-sends on NACK and on detected loss. The test
checks these properties:

* each delivered packet gets exactly one answer;
* `expected` never goes back and never passes the end of a message;
* each message gets exactly one CN, and only after all its packets arrived;
* a final WRITE packet never leaves early;
* all memory is free at the end.

It also counts every mechanism, and fails if one never occurred: fast
path, duplicate, creation, SACK, growth, merge, NACK at the cap, garbage
collection, CN, WRITE hold, transmit stall, receive stall, recovery and
termination. A
run takes about a million cycles and a few seconds.

### Memory use with 20 concurrent connections

`tb_eunomia_mem_util` sends 20 concurrent 100-packet messages into the
receive port. In each run, a share of the connections is reordered, and
within those a share of the packets is moved 1 to 32 positions later. No
packet is lost. The table gives master-array occupancy averaged over every
cycle of the run, per connection, against a 256-bit static bitmap with 9
bytes of state (41 bytes):

| connections reordered | packets moved | bitmap B/conn | total B/conn | peak words |
|---|---|---|---|---|
| 0%   | -    | 0    | 0    | 0   |
| 50%  | 10%  | 2.4  | 26.2 | 271 |
| 50%  | 100% | 5.0  | 28.8 | 308 |
| 100% | 10%  | 5.6  | 53.3 | 553 |
| 100% | 100% | 9.9  | 57.4 | 612 |

The bitmaps themselves stay far below the static 32 bytes. A connection that
is never reordered costs nothing. Once most connections are reordered, the
48-byte metadata region dominates, and the total passes the static scheme.
Larger bitmap blocks would shrink the address table. The numbers depend on
the displacement chosen here.

Running one test with Verilator:

```
verilator --binary --timing --assert -Irtl rtl/eunomia_pkg.sv \
  rtl/eunomia_mem_ctrl.sv rtl/eunomia_hd_bitmap.sv rtl/eunomia_mc_arbiter.sv \
  rtl/eunomia_pkt_driver.sv rtl/eunomia_sender_agent.sv rtl/eunomia_top.sv \
  tb/tb_eunomia_top.sv --top-module tb_eunomia_top -Mdir obj_top
./obj_top/Vtb_eunomia_top
```

For a unit test, list the package, the module (with `eunomia_mem_ctrl` for
the bitmap test) and its testbench. The simulator is two-state, so all state
that is read is reset; resets are synchronous and active low.
