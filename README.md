# NetReduce: in-network gradient reduction for RoCE v2, in SystemVerilog

Data-parallel training spends much of its time in all-reduce: every worker
holds a gradient vector, and every worker needs the element-wise sum of all of
them. This design does the summing in the network, so the workers do not have
to do it. An accelerator sits beside an ordinary Ethernet switch, and the
switch sends it all RoCE v2 (RDMA over UDP) traffic.

The hosts of a ring run what looks like a plain ring all-reduce. Host *h*
sends its gradients as RDMA SEND messages to host *h+1*. The accelerator waits
until it holds the same packet position of the same message from every host
of the ring. It then adds the payloads and sends every one of those packets on
to its destination with the sum as its payload. Each host therefore receives
the finished result on its normal RDMA connection, in one pass instead of the
2(H-1) steps of a ring.

The RDMA connections stay end to end. The accelerator terminates nothing: it
does no acknowledgements and no retransmissions. The NICs' own reliable-
connection machinery still does loss recovery, and the accelerator only has
to recognise retransmitted packets and answer them sensibly.

The RTL here covers the accelerator's packet path: ingress, classification,
arrival tracking, buffering, aggregation, the result history, header handling
and egress. Host software, the switch, the NICs and the MAC/PHY are not
included.

## Packets, messages and rings

A *ring* is a set of H hosts running one all-reduce. A machine with n GPUs runs
n independent rings. The accelerator tells them apart by RingID.

Gradients are cut into *messages* of at most 170 packets. Each message is one
RDMA SEND, so the NIC segments it into SEND First / Middle / Last packets (or a
single SEND Only). Each packet carries 1 KB of payload.

The first packet of every message carries a 16-byte NetReduce header right
after the BTH (the RDMA base transport header). Its fields are:

| Field | Width | Meaning |
|---|---|---|
| InetTag | 32 bits | `0x494E4554`, marks aggregation traffic |
| RingID | 32 bits | the ring the message belongs to |
| MsgID | 32 bits | the message number, counted per host |
| MsgLen | 32 bits | the message length in packets |

The hosts put this header at the start of the SEND payload, so the NIC
neither knows nor cares that it is there. On a first packet the header takes
16 of the 1024 payload bytes, so the packet carries 1008 bytes of gradients.
The hosts must line their data up so that the same gradient words sit at the
same payload byte on every host.

Gradients are 32-bit big-endian integers: fixed-point values that the hosts
have converted from floating point. Sums wrap around.

Frames are assumed to be Ethernet II, then IPv4 without options, then UDP to
port 4791, then the BTH. Headers are therefore 54 bytes long, or 70 bytes with
the NetReduce header.

Inside the chip a frame moves as 64-byte *beats* (`beat_t` in `nr_pkg.sv`).
Each beat has:

- 512 data bits, with byte 0 of the beat in bits [511:504];
- a byte count for the last beat;
- start-of-frame and end-of-frame flags;
- the 3-bit number of the port the frame arrived on.

Every stream uses valid/ready handshakes.

### Recovering which message and position a packet belongs to

Only first packets say which ring and message they belong to. Middle and last
packets carry nothing but the connection (destination QP) and a PSN (packet
sequence number). Two lookup tables, filled by first packets, recover the rest
(`lut1.sv`, `lut2.sv`, `parser.sv`):

- **LUT#1** maps {source IP, destination IP, destination QP} to
  {RingID, HostID}. It holds n·H entries. HostIDs are handed out in the order
  in which a ring's connections first appear.
- **LUT#2** keeps, for each (ring, host), the starting PSN, the length and the
  MsgID of that host's last N messages, so n·H·N entries in all.
  - A middle or last packet matches the message whose PSN range holds its PSN.
  - Its offset is PSN − PSN0.
  - The comparison is done modulo 2^24, so a message may straddle the PSN wrap.

The Parser turns each frame head into
{aggregation?, first?, RingID, HostID, MsgID, offset}. A frame that is not a
tagged SEND, or whose connection or PSN is unknown, becomes a plain
forwarding case.

## The arrival bitmap: the hard part

Hosts send under a message-level sliding window of N (N = 2). Host *h* starts
message *i+N* only after it has received the whole result of message *i*. So
at any moment only messages i … i+N of a ring can be in flight, and the
accelerator keeps arrival state for N+1 messages per ring.

The State record (`state_record.sv`) holds one H-bit column per
(ring, slot, offset), where:

```
slot = MsgID mod (N+1)
col  = slot * MAX_MSG_LEN + offset        (MAX_MSG_LEN = 170, so 510 columns)
```

Bit *h* of a column says that host *h*'s copy of that packet has arrived.

For each aggregation packet the State Manager (`state_manager.sv`) reads its
column and the column at the *same offset in the next slot*, which belongs to
message MsgID − N. It then decides:

| Bit of this host | Column afterwards | Decision | What happens |
|---|---|---|---|
| clear | incomplete | STORE | set the bit; clear this host's bit in the next slot; keep the packet |
| clear | complete (all H bits) | STORE_AGG | as STORE, then aggregate the column |
| set | incomplete | DROP | a retransmission of a packet still waiting: discard it |
| set | complete | REPLAY | a retransmission of a packet already summed: answer it from the history |
| — | — | BYPASS | not an aggregation packet: forward it unchanged |

Clearing the next slot is what lets slots be reused without a separate
release step. When a host sends packet *o* of message *i*, it must already
have received the result of message *i−N*. The column of *i−N* at offset *o*
is therefore finished from that host's point of view, and its bit can be
cleared, ready for message *i+1*.

REPLAY matters because the hosts' NICs still run RDMA reliability. Suppose the
aggregated packet back to a host was lost. The sending host then retransmits
its original packet, and the accelerator must return the sum again, not the
lone payload.

**Limitation inherited from the scheme.** A host may fall behind by a whole
message at some offset. This happens when every other host has sent message
m+1 at offset *o* before the slow host has sent message m at *o*, which the
window allows. The slow host's bit for message m−2 in slot (m+1) mod 3 is
then still set when the others fill it, and the column is judged complete one
packet early. The RTL keeps the rule as the original design states it. A safe
variant would keep N+2 slots, or clear the slot when its column is aggregated.
The testbenches do not produce this case.

The State record is cleared by a sweep after reset or `cfg_clear`
(`busy` is high meanwhile). It has two read ports and two write ports, for
the current column and the next one.

## Buffers, aggregation and the history

A packet marked STORE or STORE_AGG goes to the Separator (`separator.sv`). The
Separator splits it into two parts:

- the header record (up to 70 bytes plus its length, payload length, PSN and
  port), which goes to the Header buffer at (ring, column, host);
- the payload, shifted so that payload byte 0 starts a beat, which goes to the
  Payload buffer at (ring, column, host, beat).

After a STORE_AGG packet's last beat is written, the Separator issues a FRESH
job for the column. A REPLAY packet's payload is discarded; its header rides
with a REPLAY job.

The Aggregator (`aggregator.sv`) serves jobs one at a time:

- **FRESH.** For each of the 16 payload beats, it reads that beat from each
  of the H hosts (one Payload-buffer read per cycle) and adds them as 16 lanes
  of 32 bits. It writes each sum beat to the History buffer and to the
  Combinator's staging area. A column takes H·16 cycles. The job is handed to
  the Combinator H·16 + 1 cycles after it was taken.
- **REPLAY.** It copies the column's 16 beats from the History buffer to the
  staging area.

The multiplexer that picks between fresh sum and history sits in the
Aggregator. It is the "Selector" between the History result and the Combinator.

The History buffer (`history_buffer.sv`) keeps one 1 KB result per
(ring, column). That is the last N+1 messages, the same span the bitmap
covers.

The Combinator (`combinator.sv`) builds the outgoing frames.

- **FRESH.** It reads the header of every host of the column in host order
  and sends one frame per host, each with the staged sum as payload. It sends
  each frame out of the port its packet came in on.
- **REPLAY.** It sends one frame, with the retransmitted packet's header.

Every header passes through the Header Manager on its way out. A frame costs
3 cycles of header fetch, then one beat per cycle.

## Header Manager: one switch or two levels

The Header Manager (`header_manager.sv`) handles two cases.

- **One switch** (`cfg_local_size == cfg_global_size`, all machines under one
  top-of-rack switch). Headers pass unchanged: every packet simply continues
  to its own destination.
- **Spine-leaf aggregation.** Each leaf's accelerator sums its local hosts and
  sends the partial result up to a spine accelerator. A header is handled as
  follows:
  - *Addressed to this switch.* A spine swaps source and destination MAC/IP,
    which sends the result back down to the leaf. A leaf replaces the header
    with the original it stored for that {destination QP, PSN}, which sends
    the result on to the real host.
  - *Otherwise, at a leaf (going up).* The original header is stored. The
    addresses are rewritten to {leaf MAC, spine MAC, leaf IP, spine IP}.

  The IPv4 header checksum is recomputed whenever an address changes.

The store holds `STORE_ENTRIES` headers and is overwritten in round-robin
order. Headers that other leaves must share (their hosts' originals) enter
through the `ext_hdr_wr`/`ext_hdr` port. The original description tests
"addressed to this switch" after the upstream rewrite, where it could never
match at a leaf. Here that test is made on the incoming header, before any
rewrite.

## Data path, end to end

```
rx[6] -> IN FIFO -> Arbiter -+-> Separator -> Header buffer  ----------+
                |   ^        |            \-> Payload buffer -> Aggregator (+History, Selector)
                v   |        |                                          |
            Parser -> State  |                                      Combinator <-> Header Manager
           (LUT#1,   Manager |                                          |
            LUT#2)  (State   +--- bypass -----------------------> Output Selector -> OUT FIFO -> tx[6]
                     record)
```

- **IN FIFO** (`in_fifo.sv`): one queue per port. The queues are merged a
  whole frame at a time, round-robin, onto one 512-bit pipeline.
- **Arbiter** (`arbiter.sv`): holds a frame's first two beats (128 bytes,
  enough for every header) while the Parser and State Manager decide, about
  5 cycles. It then streams the frame to the Separator or the bypass path, or
  discards it.
- **Output Selector** (`out_selector.sv`): merges combined frames and bypassed
  frames, a frame at a time.
- **OUT FIFO** (`out_fifo.sv`): one queue per port. It stalls its input while
  the queue the current beat is headed for is full.
- **netreduce_top** (`netreduce_top.sv`): wires it all together. It brings out
  the control-plane settings as `cfg_*` ports, and five counters of decisions
  (bypass, drop, store, aggregate, replay).

## Sizes at the default parameters

| Parameter | Default | Meaning |
|---|---|---|
| NPORTS | 6 | 100 GbE ports |
| RINGS | 8 | rings (GPUs per machine) |
| HOSTS | 6 | hosts per ring |
| WINDOW | 2 | sliding window N |
| MAX_MSG_LEN | 170 | packets per message |
| PAY_BYTES | 1024 | payload bytes per packet |
| FIFO_DEPTH | 64 | beats per port queue |
| STORE_ENTRIES | 64 | Header Manager store |

Memory at the defaults:

| Memory | Size |
|---|---|
| Payload buffer | 8 × 510 × 6 × 1 KB ≈ 25 MB |
| History buffer | 8 × 510 × 1 KB ≈ 4 MB |
| Header buffer | about 2 MB |

That is more than most FPGAs hold on chip, and a real build would put the
payload buffer in board memory. Here the buffers are plain arrays with a
synchronous read.

Throughput: the whole accelerator shares one 512-bit pipeline. At an assumed
250 MHz that is 128 Gb/s for all ports together, well short of six ports at
line rate. Widening the pipeline or replicating it per port would be the next
step.

The end-to-end testbench measures latency. From the packet that completes
a column to the first result frame leaving, it is 73 cycles with 3 hosts.
Each further host adds 16 cycles of summing. At 250 MHz that is well under
a microsecond.

## Where this design departs from the original description

- **Bitmap index.** The index is read as `slot*MAX_MSG_LEN + offset`, with
  the clear going to the same offset of the next slot. The original formula,
  taken literally, only shifts the column by one.
- **Packet format.** The NetReduce header layout, the opcode handling,
  54/70-byte headers with no VLAN or IP options, and 32-bit fixed-point
  lanes are all this design's choices.
- **Not built: floating-point aggregation.**
- **Not built: RoCE ICRC.** The invariant CRC is not recomputed after the
  payload changes. A NIC that checks ICRC would reject the results, so a real
  deployment must add an ICRC unit before the OUT FIFO, or run with ICRC
  checking off.
- **Partly built: two-level aggregation.** The header exchange between leaves
  is only a port. A leaf does not fan one result out to many hosts: it
  restores one stored header per packet.
- **Exact timing.** Each block's opening comment gives its timing. The
  original gives none of these cycle counts.
- **Inherited limitation.** The stale-bit case described under the arrival
  bitmap is kept as designed.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. For
example:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/nr_pkg.sv tb/nr_tb_pkg.sv tb/tb_netreduce_top.sv --top-module tb_netreduce_top
./obj_dir/Vtb_netreduce_top
```

- `tb_<block>.sv` checks one block against a model written inside the
  testbench, with random traffic.
- `tb_netreduce_top.sv` runs a small configuration and counts every
  mechanism at least once. It uses 2 rings of 3 hosts, 4-packet messages,
  a PSN wrap, a non-RoCE frame, a RoCE ACK, an early duplicate (drop), a late
  retransmission (replay) and random egress back-pressure.
- `tb_netreduce_full.sv` uses every default parameter, with six hosts sending
  full 170-packet messages through the sliding window.

Both end-to-end benches use `nr_host_model.sv`, a model of the hosts.

- It follows the window rule.
- It computes every expected sum from a hash of (ring, host, message, offset,
  word).
- It checks every frame that leaves byte for byte.

To try another size, change the parameters at the top of
`tb_netreduce_top.sv`. To change the arithmetic, edit the adder loop in
`aggregator.sv`; the lane width is fixed by `BEAT_W` and the 32-bit lanes.
