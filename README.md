# QingNiao receive path: application-defined (L7) dispatch on the NIC

A server that shards its work across threads must send every request to the
thread that owns its data. When that choice depends on a field inside the
application message (a user ID, a URL path segment, a key range), it is an
*L7 dispatch*. It is usually done in software, by a proxy or a dispatcher
thread, at a cost of tens of microseconds per message. This design moves it
into the NIC's receive path. The NIC reads the message fields as packets
arrive, picks the RX queue (and so the thread) from rules that the application
loads at run time, and DMAs the payload straight into that queue's buffers.

The NIC can do this cheaply because of one agreement with the sending
library: **every field a rule may look at is placed in the first packet of
the message.** So the NIC parses only first packets. It remembers each
message's decision in a small cache and steers the later packets from there.
It never buffers a whole message or reassembles one. Apart from a transient
buffer of one packet per dispatch unit, the NIC keeps only per-message state:
a descriptor, a bitmap of received packets and a timer.

The RTL covers the receive-side logic between the Ethernet MAC and the
host DMA/queue manager. It is a 512-bit AXI-Stream datapath, meant for
250 MHz. The MAC, the queue manager with its descriptor rings, the PCIe DMA
engine, the transmit path and the host software that writes the rules are
not part of it. Their signals are ports of the top module `qn_rx_top`.

```
 MAC ──► packet_filter ──► rsd_array (4 × rsd) ──► pkt_rx_engine ──► DMA writes
   AXI-S   parse QNP header     BytePipe + Matcher      │  ▲    │ ──► descriptor fetch
           drop non-QNP /       + packet buffer         ▼  │    ▼
           reconfiguring apps                   dispatch_cache  msg_rx_engine ──► host notification
```

## 1. Packet format the hardware expects

Messages travel over UDP in *QNP* packets. The headers are padded so that
Ethernet + IPv4 + UDP + QNP take exactly one 64-byte beat. Everything after
that beat is payload. Byte *n* of the frame is in bits `[8n+7:8n]` of its beat.

| bytes | field | notes |
|---|---|---|
| 12–13 | EtherType | must be 0x0800 |
| 23 | IP protocol | must be 17 (UDP) |
| 36–37 | UDP destination port | must be `QNP_PORT` (9000), big-endian |
| 38–39 | UDP length | big-endian; payload bytes = UDP length − 30 |
| 42 | app_id | selects the application's rules |
| 43 | msg_type | selects the rule set within the application |
| 44–47 | msg_id | message ID, little-endian |
| 48–51 | msg_acked_id | parsed, not used on receive |
| 52 | msg_len | packets in the message (1–8 tracked) |
| 53 | pkt_seq | packet number within the message, 0 = first |
| 54 | pkt_flag | DATA/ACK, parsed, not used |
| 55 | seg_cnt | payload beats that hold dispatch fields (0 = all) |
| 56–63 | padding | |

The QNP field order and sizes come from the protocol definition. The byte
offsets and the little-endian packing of multi-byte QNP fields are this
design's choice.

The message payload is a sequence of TLV fields: a 1-byte field index, a
1-byte length, then that many value bytes. Fields longer than 255 bytes are
not supported by this encoding.

## 2. Dispatch rules as skip-and-match state machines

A rule is a chain of *skip-and-match* steps over one field's value:

* **Skip n**: jump over *n* bytes (n < 64).
* **SkipUntil '/'**: jump to just past the next '/'.
* **Match s**: compare the next `len(s)` bytes (at most 8) with the string *s*.

For example, "student ID looks like `/<anything>/2024…`" is *Skip 0, Match "/"*,
then *SkipUntil '/', Match "2024"*.

The chain is compiled into two 512-entry tables that work together:

* **CAM entry (96 bits)**: `{app_id, msg_type, field_idx, state, data[8 bytes]}`.
  It is a match state. A lookup key has the same layout. Only the first
  `inspect` bytes of `data` are compared, where `inspect` is the count given by
  the RAM entry that led there. If several entries match, the lowest index wins.
* **RAM entry (32 bits)**: `{field_idx, skip, inspect, state}`. It is a skip
  state, stored at the same index as the CAM entry that leads to it.
  * `skip = 0xFF` means SkipUntil '/'.
  * `skip = 0` with `inspect = 0` marks a terminal entry. Its `state` byte is
    then the RX queue.

The matcher runs the chain as follows:

1. It starts with a CAM lookup of `{app, type, field 0, state 0xFF}` with no
   bytes compared. The hit picks the rule's first RAM entry.
2. For the current RAM entry, it moves through the TLV fields until it is
   inside field `field_idx`. Fields with another index are skipped whole.
3. It skips `skip` bytes of the value, takes the next `inspect` bytes, and
   looks up `{app, type, field_idx, state, bytes}`.
4. On a hit, the skipped and inspected bytes are consumed. The hit index names
   the next RAM entry, and the matcher repeats from step 2.
5. It stops at a terminal RAM entry, whose `state` is the queue. A CAM miss, a
   field that ends too early, or a packet that runs out of bytes all give the
   **default queue**, which is a register.

Rule A from above, loaded for app 1 and type 1, giving queue 5:

| index | CAM `{field, state, string}` | RAM `{field, skip, inspect, state}` |
|---|---|---|
| 0 | `{0, 0xFF, ""}` (start) | `{0, 0, 1, 10}` |
| 1 | `{0, 10, "/"}` | `{0, 0xFF, 4, 11}` |
| 2 | `{0, 11, "2024"}` | `{0, 0, 0, 5}` (terminal: queue 5) |

Branching rules share a state. For example, two CAM entries
`{0, 11, "2024"}` and `{0, 11, "2023"}` lead to different RAM entries and
so to different queues.

Each new rule set should start with a *start* CAM entry for its
`{app, type}`. A rule of *n* matches uses *n* + 1 CAM entries and *n* + 1
RAM entries. The two tables are written at the same index.

## 3. BytePipe: a byte stream 64 lanes wide

The matcher reads the payload as a stream of bytes, but the data arrives 64
bytes per beat and a field can start at any byte. `byte_pipe` is built from
64 one-byte-wide first-word-fall-through FIFOs, each 128 deep (8 KB in all).
A write or read index rotates over the FIFOs:

* **Write round**: byte *k* of a write of *n* bytes goes to FIFO
  `(wr_idx + k) mod 64`, then `wr_idx` advances by *n*.
* **Read round**: removes the first *n* bytes and advances `rd_idx` by *n*.
* **Inspect**: a registered window `win` holds the next 64 bytes (oldest in
  byte 0). It is reloaded from the FIFO heads every cycle, so it costs nothing.
* A priority encoder reports the first '/' in the window (`until_found`,
  `until_pos`) for SkipUntil.

A read or write round takes 3 cycles: request, FIFO update, window reload.
Only one round is in flight at a time, and `win_ok`/`rd_ready` are low while
one is.

## 4. Matcher timing

One skip-and-match whose bytes are already in the window takes **6 cycles**:

1. KEY: work out the skip offset and pick the inspected bytes.
2. CAM: compare against all entries.
3. RAM: read the next entry.
4. DECIDE: issue the BytePipe read.
5–6. The two remaining cycles of the 3-cycle read round.

Moving to another field costs one read round per TLV header and per 64
bytes skipped.

Inside one RSD, from the RSD accepting the header beat to its result
pulse, for a rule on the first field:

| skip-and-matches (not counting the start lookup) | 2 | 3 | 4 | 5 | n |
|---|---|---|---|---|---|
| cycles | 18 | 24 | 30 | 36 | 6 + 6n |

Measured through the whole receive path at default sizes, from the header
beat entering `qn_rx_top` to the updated result counter, with a chain of
one-byte steps:

| skip-and-matches | 1 | 2 | 4 | 8 | 16 | 32 | 48 |
|---|---|---|---|---|---|---|---|
| this design | 14 | 20 | 32 | 56 | 104 | 200 | 296 |
| reference prototype | 15 | 21 | 33 | 57 | 105 | 201 | 297 |

The cost per step is the same 6 cycles. The fixed part is one cycle shorter
than the reference measurement.

After the result, the matcher reads out whatever is left of the packet in the
BytePipe, so the next packet starts clean. This flush is what `seg_cnt`
shortens (next section).

## 5. RSD, seg_cnt and parallel RSDs

An `rsd` (receive side dispatch unit) is made of one BytePipe, one matcher
and one transient packet buffer, 32 beats deep. It handles one packet at a
time:

* Every beat goes into the packet buffer.
* For a **first packet** (`pkt_seq = 0`), the payload beats are also written
  into the BytePipe, and the matcher is started on the header beat. The
  buffered beats leave, tagged with the queue, as soon as the result is known.
  This can happen while the packet is still arriving.
* A **later packet** leaves at once with `first = 0`. Its queue comes from the
  dispatch cache downstream.
* The next packet is accepted only once the current one has fully left and
  the matcher has flushed.

**seg_cnt**: the sender sets it to the number of payload beats that hold
dispatch fields. Only that many beats are written to the BytePipe, so the
flush after the result is shorter. `seg_cnt = 0` means all beats. The
reference applies seg_cnt to the transient buffer. Here all beats are still
buffered, because all must be delivered, and seg_cnt limits what enters the
BytePipe. The effect on the flush is the same.

`rsd_array` holds `N_RSD = 4` units.
* Packets are sharded by `msg_id mod N_RSD`. All packets of a message therefore
  take the same unit in order, and a first packet always reaches the cache
  before its later packets.
* The outputs are merged by a round-robin arbiter that keeps its grant for a
  whole packet.
* All units receive the same configuration writes.

## 6. After the dispatch decision

`pkt_rx_engine` takes each packet leaving the RSDs and finds out where its
payload goes.

**First packet**
* It probes the message table (`msg_rx_engine`).
* If the message's slot is free, it fetches a descriptor from the chosen queue,
  opens the message entry and writes `{msg_id, queue}` into the dispatch cache.
* If the message is already open (a retransmitted first packet), it reuses
  the stored descriptor.
* If the slot belongs to another open message, or the queue has no descriptor,
  the packet is discarded.

**Later packet**
* It looks up the cache. A miss means the first packet was never seen, or the
  message has already finished, and the packet is discarded. Out-of-order
  recovery is left to the sender's transport.
* On a hit, the descriptor comes from the message table.

**Delivery**
* Payload beat *k* (*k* ≥ 1, after the header beat) is written as a DMA beat to
  `desc.addr + pkt_seq × 1500 + 64 × (k − 1)`. The stride of 1500 bytes is the
  sending library's segment size, so packet *s* lands at offset `1500·s`.
* Afterwards the engine sends RECV to the message table.

`dispatch_cache`:
* 128 entries of `{valid, msg_id[32], queue[8]}`, direct-mapped on
  `msg_id[6:0]`.
* It answers 2 cycles after a lookup.
* An entry is invalidated when its message completes or expires.

`msg_rx_engine` keeps 512 entries, indexed by `msg_id mod 512`. Each holds:
* the 16-byte descriptor;
* the queue and the message length;
* an 8-bit bitmap of received packets;
* a 24-bit timestamp of the last packet.

Its behaviour:
* When the bitmap covers `msg_len` packets, it raises `cpl` (expired = 0) to
  the host and frees the entry.
* A scanner visits one entry per idle cycle. An entry idle for more than
  `TIMEOUT_TICKS` is freed and reported with expired = 1, so the host can
  reclaim the buffer.
* The timer ticks every `TICK_DIV = 16` cycles. 15,625,000 ticks make the
  1 s timeout at 250 MHz, which fits the 24-bit timestamp.
* Messages longer than 8 packets cannot be tracked by the 8-bit bitmap.

`packet_filter`:
* It parses the header beat into `pkt_meta_t` and holds it for the packet.
* It discards frames that are not QNP.
* It discards all frames of an application whose *drop* bit is set. The
  controller sets this bit while it rewrites that application's rules (a
  rule set is several table writes), so other applications keep running
  undisturbed.

## 7. Top-level interface (`qn_rx_top`)

| group | signals | protocol |
|---|---|---|
| MAC | `s_axis_t{data,keep,last,valid,ready}` | AXI-Stream, 512 bit |
| controller | `cfg` (`cfg_t`: `valid, target, addr, wdata`) | single-cycle write. Targets: `CFG_CAM` (wdata[95:0] entry, wdata[96] valid), `CFG_RAM` (wdata[31:0]), `CFG_DROP` (addr[7:0] app, wdata[0]), `CFG_DEFQ` (wdata[7:0]). Written to all RSDs. |
| queue manager | `desc_req_{valid,ready,rxq}`, `desc_rsp_{valid,ok,desc}` | request, then one response. `ok = 0` means the queue is empty. |
| DMA | `dma_{valid,ready,addr,data,len}` | one beat per transfer, `len` valid bytes from byte 0 |
| host notification | `cpl_{valid,ready}`, `cpl` | `{expired, rxq, msg_id, msg_len, desc}` |
| observation | `stats`, `rsd_busy`, `msgs_active` | counters of every mechanism (see `stats_t`) |

Reset is synchronous and active high. All shared types are in `rtl/qn_pkg.sv`.

Default parameters follow the reference prototype where it gives numbers:
* 4 RSDs
* 64 × 128 BytePipe FIFOs
* 512 CAM and 512 RAM entries
* 128-entry cache
* 512 message entries
* a 1 s timeout

`BUF_DEPTH = 32` beats, `TICK_DIV = 16`, `CHUNK_BYTES = 1500` and
`QNP_PORT = 9000` are this design's choices.

## 8. Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=… failures=…` and has a watchdog. `tb/qn_tb_pkg.sv` builds
frames, TLV payloads and configuration writes for the testbenches.

| testbench | what it checks |
|---|---|
| `tb_byte_pipe` | random writes, reads and inspects against a byte-queue model; '/' position; 3-cycle rounds; the read/write example with indices 1/0 |
| `tb_rule_cam`, `tb_rule_ram` | random contents against a model; lowest-index priority; masked compare |
| `tb_matcher` | Rule A and Rule B over real BytePipe data; SkipUntil; long fields; default path; exactly 6 cycles per skip-and-match |
| `tb_pkt_buffer` | FIFO order and flow control under random stalls |
| `tb_rsd` | queues of first packets, pass-through of later packets, unchanged beats, seg_cnt, header-only packets, 6-cycle slope, back-pressure |
| `tb_rsd_array` | sharding by message ID, no interleaving inside a packet, ≥ 2 RSDs busy at once |
| `tb_packet_filter` | metadata parsing, non-QNP drop, per-app drop and release |
| `tb_dispatch_cache` | fill, hit, miss, tag compare, invalidation, 2-cycle answer |
| `tb_msg_rx_engine` | probe, alloc, recv, completion (in any packet order), collision, expiry |
| `tb_pkt_rx_engine` | exact DMA addresses and data, descriptor reuse, every discard case, completion |
| `tb_qn_rx_top` | end to end with a short timeout (see below) |
| `tb_qn_rx_top_full` | the same traffic with every parameter at its default |
| `tb_workload_rules` | default sizes: 96 rules × 5 skip-and-matches (482 of 512 entries), random messages to 48 queues, then run-time rewrite to a 48-step chain and the latency table of section 4 |

The end-to-end tests put a behavioural host around the top:
* descriptor fetch;
* a byte-addressed memory for DMA writes;
* random back-pressure on DMA and notifications.

Every completed message is checked byte for byte at
`descriptor + seq × 1500`, and it must carry the right queue. The traffic is:
* matching and non-matching messages;
* 4 × 1500-byte messages;
* seg_cnt;
* a later packet without its first packet;
* a non-QNP frame;
* an application under reconfiguration;
* a message with a lost packet;
* a burst over all four RSDs.

Each mechanism is counted, and one that never occurs is a failure. The
reduced test (`TIMEOUT_TICKS = 1500`, `TICK_DIV = 4`) also sees the lost
packet's message expire. The full-size test cannot wait the 250 million
cycles of a 1 s timeout, so there the message must instead still be open
at the end.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/qn_pkg.sv tb/qn_tb_pkg.sv tb/tb_qn_rx_top.sv --top-module tb_qn_rx_top
./obj_dir/Vtb_qn_rx_top
```

Each testbench finishes in seconds. The full-size end-to-end test takes
about 10 s to build and run.

## 9. Where this design departs from the reference, and its limits

* **Start of a rule.** How the first state is selected is not described. Here
  it is a CAM entry with state 0xFF and an empty string.
* **Consumption.** SkipUntil consumes the '/' and a matched string is consumed,
  so the next step starts after it.
* **Default queue.** A mismatch goes to a programmable default queue.
* **Latency.** The latency is 8 + 6n cycles, measured end to end, against
  9 + 6n in the reference measurement (section 4).
* **seg_cnt.** It limits the BytePipe input rather than the packet buffer
  (section 5).
* **One packet per RSD.** Each RSD holds one packet at a time. A long first
  packet with no `seg_cnt` blocks its RSD until its bytes are flushed. Other
  RSDs keep working, but a packet for a blocked RSD also stalls the shared
  input.
* **Message table.** It is direct-mapped: two open messages whose IDs are equal
  modulo 512 collide, and the second one's packets are discarded.
* **Cache.** It is direct-mapped on 7 ID bits: a later packet whose entry was
  overwritten by another message is discarded as if its first packet had
  been lost.
* **Message length.** Messages are limited to 8 packets by the 8-bit received
  bitmap. The reference gives the same width and no wider mode.
* **Match width.** Matches are at most 8 bytes per step. Longer strings need
  chained steps with skip 0.
* **Other NIC traffic.** Non-QNP frames are discarded, because the ordinary
  NIC receive path they would go to is outside this design.
* **Checksums.** IP and UDP checksums are not checked, and the IP header is
  assumed to be 20 bytes (no options).
* **Outside the design.** The MAC, the queue manager, the DMA engine, the
  transmit path and the rule compiler are not included.
