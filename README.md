# A TCP data path for a match-action switch pipeline

This RTL runs the per-packet part of TCP (sequence tracking, reassembly,
acknowledgements, windows, retransmission triggers and rate limiting) inside
a reconfigurable match-action (RMT) pipeline of the kind found in
programmable switches. Those pipelines process one packet header per clock
and can run at terabit rates. They come with hard rules:

- a packet passes each stage exactly once;
- every stage may touch only its own small memory;
- each memory can do at most one read-modify-write per packet;
- state cannot flow back to an earlier stage except by sending a new packet
  around the loop.

The design turns TCP into work that fits those rules. Connection setup,
congestion policy and error recovery stay in software on the control plane.
The host library reads and writes payload through DMA into buffers in host
memory.

The SystemVerilog models the pipeline at block level. Each block is written
as one register stage that holds its own per-connection memory. The modelled
traffic is headers only: payload stays beside the pipeline.

## Events and the header vector

Three kinds of input enter the pipeline (`ev_in_t` in `laminar_pkg`):

- TCP segments from the network (MAC);
- DMA writes from the host library, carrying new transmit data or a
  "receive buffer freed" (SYNC) message;
- periodic triggers from the switch's packet generator.

The classifier maps these inputs onto the workflows in `ev_t`:

| event | source | purpose |
|---|---|---|
| `EV_RX` | network segment | receive data, process ACK |
| `EV_TX` | host DMA write | transmit data at buffer offset `seq` |
| `EV_SYNC_HOST` | host DMA write | application consumed bytes, reopen receive window |
| `EV_SYNC_GEN` | packet generator | grant sending credits to one flow; tick for timeouts |
| `EV_ACKGEN` | mirrored by the pipeline itself | ACK pseudo-segment, optionally carrying an OOO merge |

Every event becomes a `phv_t` header vector. The vector carries the event
fields plus one snapshot field group per egress stage, so each later stage
sees what earlier stages decided. There are two drop flags:

- `drop` kills the event entirely.
- `pl_drop` discards only the payload. The headers still continue, so the
  ACK a rejected segment carries is still processed and an ACK is still
  returned.

## Pipeline

```
 ev ─► classifier ─► mux_demux ─► scheduler ─► header_transform ─┐ ingress (read-only)
                                                                 ▼
                                          ┌────────── traffic_manager ◄─────┐
                                          ▼                                 │ mirror
 rx_window (next-seq ► avail ► ooo-tail ► ooo-head) ► tx_window ►           │ (EV_ACKGEN)
   data_placement ► proto_signal ──────────────────────────────────────────┘
        ► rate_control ► app_notif ─► out  (segment to MAC or DMA write + notification)
```

**Ingress (four blocks).** Ingress is read-only: its tables change only by
control-plane writes.

- `classifier` picks the workflow. Non-TCP network traffic is marked and
  dropped here; it belongs to ordinary switch forwarding.
- `mux_demux` finds the connection.
  - For segments, it looks up the 4-tuple in a direct-mapped table. The
    index is an XOR fold of the tuple, and the stored tuple is compared.
  - For host events, it checks that the connection belongs to the DMA
    context that sent the event.
- `scheduler` decides whether a packet-generator trigger becomes a credit
  SYNC for its flow. A trigger passes when the flow is active and the trigger
  round is a multiple of 2^k, where k is set per flow. It also attaches the
  per-flow credit amount.
- `header_transform` builds the outgoing 4-tuple. It also turns a transmit
  buffer offset into a sequence number (initial sequence number + offset).

**Traffic manager.** The traffic manager has two FIFOs:

- one for ingress traffic;
- one for mirrored pseudo-segments, always served first, so a merge or ACK
  is never starved by new traffic.

A full FIFO drops at the tail. A drop here looks to TCP like network loss,
and TCP recovers from it. Egress itself never drops for lack of space.

**Egress (six blocks, nine stages).** The egress blocks hold all
per-connection TCP state:

- `rx_window` has four stages. It is described in the next section.
- `tx_window` handles the send side:
  - it discards stale transmit data below `snd_una` and advances `snd_nxt`;
  - it applies ACKs, counts duplicate ACKs, and sets `fast_rtx` on the
    third duplicate;
  - it flags a retransmission timeout when `RTO_SYNCS` credit SYNCs in a row
    see no progress while data is outstanding.
- `data_placement` turns sequence numbers into host addresses. It also
  computes the receive-head and transmit-free offsets that the host is told
  about.
- `proto_signal` handles congestion signalling and ACKs:
  - it keeps congestion counters (acked bytes, ECN-echoed bytes, duplicate
    ACKs) that the control plane reads for its DCTCP policy;
  - it decides that an ACK is due and mirrors the ACK pseudo-segment;
  - it writes ACK number and window into outgoing segments.
- `rate_control` manages sending credit:
  - it adds SYNC credit grants;
  - it lets a transmit segment through only if both the credits and the
    peer's window cover it;
  - it halves the credits on fast retransmit.
- `app_notif` produces the output. The output is either a segment for the
  MAC, or a DMA write into the receive buffer with an inline notification to
  the host library. The notification carries receive head, reclaimed
  transmit space, credits, and fast-retransmit/timeout flags.

## Receive window: optimistic advance and a one-gap island

Reassembly is the hardest part. A textbook receiver checks the window
before it moves `next-seq`. In a pipeline, both values cannot be
read-modify-written by the same packet in one stage. So the state is split
across four consecutive stages. Every quantity after the first is kept as an
offset from `next-seq`:

| stage | state | in-order segment | out-of-order segment |
|---|---|---|---|
| 1 `rxw_next_seq` | next-seq (absolute) | trim duplicate prefix, advance by accepted length | pass offset from next-seq |
| 2 `rxw_avail` | window space beyond next-seq (signed) | subtract length; if negative: overrun | discard if it ends beyond avail |
| 3 `rxw_ooo_tail` | island end, offset | shrink by length (0 = no island) | open island or extend its end |
| 4 `rxw_ooo_head` | island start, offset | shrink by length; reaching 0 = gap closed | set or extend island start |

**Optimistic advance.** Stage 1 advances `next-seq` before it knows whether
the segment fits the window. Stage 2 makes the window check afterwards. When
a segment overran the window, the following happens:

- its payload is discarded;
- `avail` is left negative;
- the first such segment raises an exception (`exc`) with the values
  `next-seq` and `avail` had before that segment.

Software then writes both values back. Until it does, every later in-order
segment also fails the check, and outgoing ACKs advertise a zero window,
which stops the sender. During that recovery interval the ACK number carries
the speculative `next-seq`. An overrun only happens when the peer ignores
the advertised window, so this path is an exception path.

**One island (OOO-1).** Only one out-of-order range is kept. Segments that
touch or overlap it extend it; a segment that is disjoint from it is
discarded and later retransmitted by the sender. Because the island is
stored as offsets from `next-seq`, every in-order segment of length L shifts
both island offsets down by L. When the head offset reaches zero, the gap is
closed.

**Merging by pseudo-segment.** When the gap closes, `next-seq` must jump
over the island. That value lives in stage 1, which the segment has already
passed. The pipeline handles this as follows:

1. Stage 4 reports `gap_closed` and the island length (`merge_len`).
2. `proto_signal` emits the ACK pseudo-segment with `seq = next-seq` and
   `len = merge_len`.
3. The traffic manager sends it round again (mirror queue, served first).
4. On its second pass it is an in-order "segment" covering exactly the
   island. It advances `next-seq`, updates `avail` and clears the island,
   all through the ordinary rules.
5. Leaving egress, it becomes the ACK that acknowledges everything.

The receive-head notification for the host is issued on the first pass
already (`rx_head_off` includes `merge_len`). The host can therefore consume
the island's bytes before the merge has finished.

A segment that reaches past the island's end simply clears the island in
stage 3. No merge is needed in that case.

**ACKs while a merge is on its way.** The merge pseudo-segment needs one trip
round the traffic manager. Meanwhile, new segments that extend the island
are acknowledged with the older `next-seq`. A sender that keeps streaming
can keep extending the island faster than each merge absorbs it. The
pipeline then issues a chain of merges, and the ACKs between them are
duplicates. A sender that fast-retransmits on every third duplicate
therefore retransmits needlessly. With NewReno-style recovery (one fast
retransmit per window), the stream test sees about 35 fast retransmissions
for 4 losses at 0.1 % loss. The data stays correct, but the sender makes
extra retransmissions.

Also, bytes that the island already holds are placed again when the sender
retransmits them. They go to the same address.

## Send side, credits and timeouts

Transmission is host-driven. The library DMA-writes payload at an offset in
its transmit ring, and the offset becomes the sequence number. Rate limiting
uses credits: the packet generator's triggers become per-flow SYNCs, and
each SYNC adds a configured number of bytes.

A transmit segment leaves only if both of these hold:

- credits >= length;
- its end is within `snd_una + peer window`.

Otherwise it is dropped, and retransmission recovers it.

Retransmission is go-back-N. On the third duplicate ACK the host is told
(`fast_rtx`) and restarts sending from `snd_una`, while the credits are
halved. The credit SYNCs double as the timer: too many of them without any
progress of `snd_una` flag a timeout in the same way.

Received ACKs that advance `snd_una` come out as a notification that
transmit space was freed.

## Control plane interface

All tables are written through one broadcast bus, `cp_wr_t {valid, tbl,
idx, data[159:0]}`. `tbl` selects the table and `idx` the entry (see
`tbl_t` in `laminar_pkg` for each data layout). A control-plane write wins
over a packet's write to the same memory in the same clock.

The control plane reads congestion counters through `met_idx`/`met` and
receives window-overrun exceptions on `exc`.

Setting up a connection means writing these tables:

- lookup;
- conn (context);
- hdr (ISS, tuple);
- sched;
- rx next-seq and avail;
- tx;
- place (buffer base, ISNs, log2 size);
- credit.

## Parameters and sizes

| parameter | default | meaning |
|---|---|---|
| `NUM_CONNS` | 32768 | connections (per-stage memory depth) |
| `CTX_W` (package) | 10 | context id width, 1024 contexts |
| `DUPACK_THRESH` | 3 | duplicate ACKs that trigger fast retransmit |
| `RTO_SYNCS` | 8 | SYNCs without progress that signal a timeout (own value) |
| `TM_DEPTH`, `TM_MIR_DEPTH` | 256, 64 | traffic manager queues (own values) |

Sequence numbers, lengths and counters are 32 bit. Receive and transmit
buffers are power-of-two rings. The receive buffer is assumed to be mapped
twice back to back in host virtual memory, so `base + ((seq - isn) &
(size-1))` is always a contiguous place for a whole segment.

## Timing

Each block is one clock. `rx_window` is four clocks.

- A network segment reaches `out` 14 clocks after it enters
  (4 ingress + traffic manager + 9 egress), if the traffic manager queue is
  empty.
- A merge pseudo-segment needs one more trip from `proto_signal` through
  the traffic manager.

One event is accepted per clock with no back-pressure. Each stateful memory
is read combinationally and written at the clock edge. Back-to-back packets
of the same connection therefore always see each other's updates.

## Where this departs from the original design or fills gaps

- **Stage count.** The original blocks span several match-action stages
  each; here each is one register stage.
- **Memories.** Memories are arrays with combinational read, not the SRAM
  of a switch stage.
- **Traffic manager.** The traffic manager is a simple two-queue model of
  what is, in a real switch, a fixed-function buffer.
- **Connection lookup.** The connection lookup is direct-mapped. The
  control plane must place connections in non-colliding buckets.
- **ACK policy.** Every received segment with payload is ACKed, including
  duplicates. The original discards duplicates; here only their payload is
  discarded. Delayed ACKs are not built.
- **Timeout detection.** Timeout detection by counting SYNCs, and the value
  8, are this design's choices.
- **Reacting to loss.** Halving the credits on fast retransmit is the
  chosen reaction. It is Reno-like, in line with the original.
- **Overrun exceptions.** Only the first overrun raises an exception.
- **Transmit-space notification.** It is sent on every `snd_una` advance,
  with no threshold.
- **Scheduling.** Scheduling is the simple power-of-two interval described
  above. Pausing idle flows is left to the control plane (it clears the
  active bit).

Not built:

- reassembly with more than one island;
- SACK;
- delayed ACKs;
- delay-based (Timely-style) congestion signals;
- the shared-log extensions;
- payload checksums;
- L2/L3 forwarding of non-TCP traffic;
- the MAC, the DMA/RDMA engine, the packet generator, the control-plane
  software and the host library.

## Files

- `rtl/laminar_pkg.sv`: types, table encodings, hash.
- `rtl/laminar_top.sv`: the whole pipeline.
- `rtl/<block>.sv`: one file per block.
  - `rx_window.sv` chains `rxw_next_seq`, `rxw_avail`, `rxw_ooo_tail` and
    `rxw_ooo_head`.
  - `phv_fifo.sv` is the queue used by the traffic manager.
- `tb/tb_<block>.sv`: a self-checking test per block.
  - Each drives random traffic and compares against a reference model
    written in the testbench.
  - `tb_rx_window` keeps an absolute-sequence model of the received byte
    ranges, independent of the offset representation.
- `tb/tb_laminar_top.sv`: end-to-end test at the default size. It plays peer,
  host, packet generator and control plane through these scenarios:
  - loss and merge;
  - duplicates;
  - replenishment;
  - overrun and restore;
  - credits and stale data;
  - ACKs, duplicate ACKs and fast retransmit;
  - timeout;
  - foreign traffic;
  - traffic-manager overflow.

  It counts each mechanism and fails if one never occurred.
- `tb/tb_stream_drops.sv`: one stream of 1000-byte segments, run four times
  with 0, 0.1 %, 1 % and 5 % random loss. The sender model is NewReno-like
  and the host model replenishes the window a quarter-buffer at a time. The
  test checks these points:
  - every byte is placed at its ring address;
  - receive head and ACK end at the stream length;
  - ACKs never go back;
  - no window exception occurs.

  Goodput per clock is printed for each loss rate.
- `tb/tb_rpc_echo.sv`: an echo-server workload at the default size. All
  32768 connections are opened over 1024 contexts, and each serves one
  64-byte request/response exchange: request in, ACK out, response out,
  client ACK in. The test checks these points:
  - every output for every connection;
  - four egress passes per exchange;
  - no traffic-manager drops while egress is fully loaded;
  - the same latency for every connection.

Every testbench prints `TB_RESULT checks=N failures=M` and has a cycle
watchdog.

## Simulating

With Verilator 5, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing -Wno-fatal --top-module tb_laminar_top \
    rtl/laminar_pkg.sv $(ls rtl/*.sv | grep -v laminar_pkg) tb/tb_laminar_top.sv
./obj_dir/Vtb_laminar_top
```

Replace `tb_laminar_top` with any other `tb_<block>` to test one block. The
full-size end-to-end test builds in a few seconds and runs in well under a
second.

Verilator has only two signal states. All pipeline registers are reset.
The per-connection memories are not reset: the control plane must write
every table entry of a connection before it is used, and the tests do so.
