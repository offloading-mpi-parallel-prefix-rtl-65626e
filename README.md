# MPI_Scan offloaded to the network interface

An MPI parallel prefix scan (`MPI_Scan`) gives rank *j* of a communicator of
*p* ranks the reduction of the contributions of ranks 0..*j*. Run in software,
every step of the collective crosses the host's PCI bus, operating system and
MPI library twice: once to receive a partial result and once to send the next
one. This design moves the whole collective into the network interface. The
host hands its contribution to its own card in a single UDP packet. The cards
then run the scan among themselves over the same Ethernet links, doing the
additions at line rate as the packets stream in. Each card returns the
inclusive prefix to its host in one UDP packet. The host therefore sees one
send and one receive per collective, whatever the algorithm.

The RTL is a user data-path module for the NetFPGA 1G reference NIC. It sits
between the input arbiter and the output queues, on the 64-bit data and 8-bit
control bus. It implements four network-level algorithms:

- sequential
- recursive doubling
- recursive doubling with multicast and late-arrival folding
- binomial tree

Addition of 32-bit integers (`MPI_SUM` on `MPI_INT`) is the only operation.

## Structure

```
             in_*  ──► scan_rx ──(bypass: non-collective packets)──────► scan_out_arb ──► out_*
                          │ slot writes, events                              ▲
                          ▼                                                  │
                 scan_core: 11 × scan_buf ◄─► scan_pass (scan_alu)           │
                            scan_ctrl (algorithm FSMs)                       │
                          │ packet requests, payload stream                  │
                          ▼                                                  │
                       scan_tx ──────────────────────────────────────────────┘
                       scan_timer (cycle counter, offload/release stamps)
```

| file | role |
|---|---|
| `nf_scan_pkg.sv` | header struct, codes, checksum and word-packing functions |
| `nf_bus_if.sv` | data/ctrl/wr/rdy bundle used inside the top |
| `scan_rx.sv` | parser: stores collective messages in slots, forwards everything else |
| `scan_buf.sv` | one message slot, 128 × 64 bit, one write port, asynchronous read |
| `scan_alu.sv` | two-lane 32-bit adder/subtractor: `v1 = a + (b − c)`, `v2 = d + (b − c)` |
| `scan_pass.sv` | streams one message through the ALU, one word per clock |
| `scan_ctrl.sv` | the four algorithms as one state machine |
| `scan_core.sv` | slots + pass engine + controller |
| `scan_tx.sv` | builds data, acknowledgement and result packets |
| `scan_timer.sv` | 64-bit cycle counter; elapsed time from offload to release |
| `scan_out_arb.sv` | packet-level round robin of forwarded and generated packets |
| `nf_scan_top.sv` | the whole engine of one node |

## Collective packet

Every packet the engine handles is a normal Ethernet/IPv4/UDP frame, so hosts
can use ordinary sockets and switches can carry the traffic. The UDP payload
begins with a collective header of eleven 16-bit fields:

```
comm_id comm_size coll_type algo_type node_type msg_type rank root operation data_type count
```

With the Ethernet, IP and UDP headers, this fills exactly eight 64-bit bus
words (`scan_hdr_t`). Word 0 bits 63:56 hold the first byte on the wire. The
data follow with two `MPI_INT` elements per word, the lower-indexed element in
bits 63:32. In front of these words, the NetFPGA I/O-queue word (ctrl = `FF`)
carries the one-hot destination port, the word and byte lengths, and the
source port.

The parser treats a packet as a collective message when all of these hold:

- it is IPv4;
- it is UDP to port 7000;
- `coll_type` is 1.

Any other packet is forwarded as the reference NIC would forward it: from MAC
port *i* to CPU port *i* and back. `msg_type[7:0]` says what the message is:

| code | message | direction |
|---|---|---|
| 0 | offload request, carries the host's data | host → own card |
| 1 | partial result | card → card |
| 2 | acknowledgement, no payload | card → card (sequential only) |
| 3 | result, with the elapsed time word after the data | card → host |

For a data message, `msg_type[15:8]` carries the *tag*, the tree level or
stage the message belongs to. Level *l* is encoded as the mask 2^(l+1) − 1.

The header of the host's request is kept for the whole collective. Every
packet the card sends is built from it, so nothing is fetched from host
memory:

- `rank` is replaced with the sender's rank.
- `msg_type` and the lengths are set.
- The IPv4 checksum is recomputed. The UDP checksum is sent as zero, which
  IPv4 allows.
- For the result, the MAC addresses, IP addresses and UDP ports are swapped,
  so that the reply reaches the socket that sent the request.

## Addressing peers

A card addresses peers by rank. For a data message, the destination MAC is
the locally administered group address `03:00:…` with a bit mask of the
destination ranks in its low bits. Each card's parser reads the sender's rank
from the header.

The output port comes from `cfg_rank_port[r]`, the MAC port (0–3) that leads
to rank *r*. This input is the static network configuration, set by software.
When a message goes to several ranks, the I/O-queue header gets the OR of
their port bits. The NetFPGA output queues then copy the packet to every one
of those ports; this is how multicast is done. In a switched network all ranks
sit behind one port, and the switch floods the group address.

## Message slots and the pass engine

A card keeps eleven slots of 128 words (1 KiB of data each):

| slot | contents |
|---|---|
| 0 … 7 | the latest message from rank 0 … 7 |
| 8 (X) | the host's own data |
| 9 (A) | the running partial (everything this card has combined so far) |
| 10 (R) | the result, or in the binomial down phase the prefix to pass on |

A slot has a *full* flag. The parser stalls the input while the slot it must
write is still full. A message from a fast peer therefore waits in the link,
and is never lost or overwritten. One slot per sender is enough because every
algorithm here consumes a sender's message before that sender can send the
next one to the same card.

All arithmetic is done in *passes*. A pass reads word *i* of every slot at
once and selects up to four operands *a, b, c, d* (each a slot or zero). It
then computes, per 32-bit lane:

- `v1 = a + (b − c)`
- `v2 = d + (b − c)`

`v1` can be written to A and `v2` to R. Either `v1` or `a` can be streamed to
the packet generator as payload. The read, the addition, the write-back and
the hand-over to the generator happen in the same clock. A pass over an
*n*-word message therefore takes *n* clocks, and a received partial leaves the
card again, combined, at line rate. The subtraction exists for the optimised
recursive doubling below.

Because the packet is built while the pass runs, sending a combined partial
costs nine words (the I/O-queue word and eight header words) plus the data. No
extra store-and-forward copy is made.

## Algorithms

The host chooses the algorithm and the node's role in the request
(`algo_type`, `node_type`, `rank`, `comm_size`), and software assigns them.
`comm_size` must be a power of two of at most 8. In what follows, *x_j* is the
data of rank *j*.

### Sequential (`algo_type` 0)

Rank 0 sends *x_0* to rank 1. Rank *j* waits for rank *j*−1's partial, adds
*x_j*, and sends the sum on to rank *j*+1. Then, because the slot has been
consumed, it acknowledges to *j*−1. A rank releases its result to the host
only after the acknowledgement from *j*+1 has arrived. The acknowledgement is
what keeps one buffer per sender safe: a rank cannot start its next
collective, and so cannot send again, until its successor has freed the slot.

### Recursive doubling (`algo_type` 1)

The algorithm has log₂ *p* stages. In stage *k*, rank *j* exchanges its
partial A with its partner *q* = *j* XOR 2^k. The received partial always
enters A. It enters the result R only when *q* < *j*, that is when bit *k* of
*j* is set. The pass for stage *k* streams A out while A is being sent, and
the following pass folds the partner's message into A and R in one go.

### Optimised recursive doubling (`algo_type` 2)

Ranks do not enter a stage at the same time. When rank *j* enters stage *k*,
its stage-*k* partner's message may already be waiting in its slot. In that
case *j* is *late*, and it saves one message:

1. In one pass, it adds the waiting message to A (and to R if *q* < *j*).
2. It multicasts the new A, tagged level *k*+1, to both its stage-*k* partner
   and its stage-(*k*+1) partner (*j* XOR 2^(k+1)).
3. It skips its own stage-(*k*+1) send, because the multicast already
   delivered that value.

This causes a problem for the stage-*k* partner. It receives a partial that
already contains its own contribution, and it knows this from the tag being
one level above its current stage. It removes that part by subtracting its
own cached partial A (`c` = A in the pass): `A + (msg − A)` = msg. The result
is the same as after a plain exchange. The stage-(*k*+1) partner uses the
message as its normal stage-(*k*+1) input.

Multicast is not used in the last stage, because there is no next partner.
The top-level testbench counts each late-rank multicast and each subtraction.

### Binomial tree (`algo_type` 3)

The highest rank, *p*−1, is the root. A rank with *m* trailing one bits
(*m* = 0 for a leaf, log₂ *p* for the root) has *m* children *j* − 2^k for
*k* < *m*, and its parent is *j* + 2^m.

- **Up phase.** Each rank adds its children's partials to its own data, in
  order *k* = 0, 1, …, and forwards the total to its parent. Each child's
  message stays in its slot. These cached partials are what the down phase
  needs.
- **Down phase.** A rank receives E, the sum of everything before its
  subtree: from its parent, or zero at the root. It sends its children their
  exclusive prefixes, lowest block of ranks first and back to back:
  - the lowest child (*j* − 2^(m−1)) gets E;
  - the next child gets E plus the cached partial of the lowest child;
  - and so on up the children.

  Each send is a single pass that also keeps the running prefix in R. The
  rank's own result is E plus its up-phase partial.

The message count is 2(*p*−1), and the depth is 2 log₂ *p*.

## Timing of a collective

`scan_timer` counts clocks from reset. It stamps two moments:

- **offload**: when the request has been stored;
- **release**: when the first word of the result leaves.

The difference is returned in the last 64-bit word of the result packet. This
lets the host measure the card's share of the collective without its own clock
resolution or PCI time. The timer is never stopped, so back-to-back
collectives need no reset. At 125 MHz the counter wraps after centuries.

Outputs `offload_ts`, `release_ts`, `elapsed`, `scan_done`, `mech[3:0]`
(acknowledgement sent, multicast, subtraction, down-phase message) and
`oversize` (request longer than a slot) stand in for status registers.

## Latency at line rate

The table below comes from a sweep over the benchmark's message sizes. Eight
full-size nodes each make three back-to-back calls per size. The links and
queues never stall. A link's only delay is that it delivers each packet whole,
after its last word has left the sender. The figures are therefore the cards'
own share of the collective. Each figure is the time word of the result: clocks of
8 ns, from a request being stored to its result leaving. Each cell gives
three values, taken over all ranks and calls: mean / minimum / worst.

| bytes | sequential | recursive doubling | optimised RD | binomial |
|---:|---:|---:|---:|---:|
| 8 | 96 / 65 / 200 | 96 / 95 / 98 | 96 / 95 / 98 | 154 / 124 / 160 |
| 64 | 138 / 86 / 305 | 166 / 165 / 168 | 166 / 165 / 168 | 241 / 194 / 251 |
| 256 | 280 / 158 / 665 | 406 / 405 / 408 | 406 / 405 / 408 | 541 / 434 / 563 |
| 1024 | 848 / 446 / 2105 | 1366 / 1365 / 1368 | 1366 / 1365 / 1368 | 1741 / 1394 / 1811 |

Some patterns in these numbers:

- **Recursive doubling.** Every rank pays log₂ *p* exchanges. For an
  *n*-word message, each exchange costs about three times (9 + *n*) clocks:
  - the sender streams its packet out;
  - the link model delivers the packet whole, store-and-forward, as the
    NetFPGA's receive queues do;
  - a pass folds the packet in.
- **Sequential.** The last rank waits for the whole chain of *p*−1 hops. On
  average, though, the sequential algorithm is never slower than the others,
  and from 16 bytes up it is the fastest.
- **Binomial tree.** The tree needs two sweeps. Inner nodes also send their
  children's down-phase messages one after another.
- **Optimised recursive doubling.** It saves nothing here, because all ranks
  start together and nobody is late. Its multicast only occurs when one rank
  is delayed, which the end-to-end test arranges on purpose.

## Where this design departs from the description it follows

- **Header row 2.** The published packet-format figure lists the second
  header row in an order that does not match Ethernet and IPv4: source MAC,
  EtherType, version/IHL and DiffServ do not fall where a standard frame puts
  them. The design uses the standard positions, because the packets must pass
  through ordinary NICs and switches. The collective fields themselves keep
  the figure's order.
- **Which stage adds to the result.** Recursive doubling is described once
  with the test *j* AND *k*. The design uses *j* AND 2^k, the condition that
  makes the prefix come out correct.
- **Binomial down phase.** Two descriptions of the down phase differ. One is
  the classic sweep, in which each node passes the prefix to its children
  level by level. The other is the NetFPGA version, in which a node sends all
  its children their prefixes back to back from cached up-phase messages. The
  RTL implements the second.
- **Own choices.** The following are this design's own: the numeric codes of
  `coll_type`, `algo_type`, `node_type` and `msg_type`; UDP port 7000; the
  tag encoding; the group-MAC rank mask; `cfg_rank_port`; the slot-per-sender
  organisation; and the position of the time word.
- **Not modelled.** The MACs and PHYs, the reference input arbiter and output
  queues, DMA and the host driver, and the host MPI library are not modelled.
  The engine runs one collective at a time: `comm_id` is carried but not used
  to keep state for several communicators. Only addition of 32-bit integers is
  computed, and `operation` and `data_type` are not decoded.
- **Sizes.** A message is at most 128 words (256 elements, 1024 bytes). A
  longer request is truncated to one slot and flags `oversize`. Odd element
  counts are padded to whole words.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `MAX_RANKS` | 8 | ranks a card can serve; one slot each; masks and slot index limit it to 8 |
| `WORDS` | 128 | 64-bit words per slot (1024 bytes of data) |

With the defaults the engine holds 11 × 128 × 64 = 90 112 bits of slot
memory. In synthesis this is roughly 2 400 flip-flops of control and header
state besides the slots.

## Simulation

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`, and has a cycle watchdog that fails a stuck
run. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
  --top-module tb_nf_scan_top rtl/nf_scan_pkg.sv tb/tb_nf_scan_top.sv
./obj_dir/Vtb_nf_scan_top
```

Replace the top module and file to run another testbench.

- `tb_nf_scan_top` runs the full-size design, with no parameter changes.
  - It builds eight nodes, and joins each one's MAC ports to the others
    through a model of the wiring.
  - Every algorithm runs four back-to-back collectives, at element counts of
    2, 256, 7, 32 and 128, on random data.
  - Every result is compared with a prefix sum computed in the testbench,
    including the echoed header fields and the elapsed time against the
    timer outputs.
  - It checks that a non-collective packet is forwarded, and that every
    mechanism happened: acknowledgements, late-rank multicasts, subtractions
    and down-phase messages.
- `tb_scan_workload` is the size sweep behind the latency table, also at
  full size. It checks every result, checks that latency never falls as
  messages grow, and checks that the 1024-byte latency stays under a bound
  derived from line rate.
- `tb_scan_ctrl` connects eight `scan_core` instances through a
  message-level network with random delays. This brings out early and late
  arrivals. It checks results and message counts at *p* = 8 and *p* = 4.
- `tb_scan_rx` and `tb_scan_tx` check parsing, stalling, forwarding, header
  construction, checksums and line rate: a 128-word payload leaves in
  137 clocks.
- `tb_scan_buf`, `tb_scan_alu`, `tb_scan_timer` and `tb_scan_out_arb` check
  the small blocks against reference models.

## Limits worth knowing

- The controller waits for each pass and packet to finish before the next
  step. Passes never overlap, even where two could run at once.
- Slot reads are asynchronous. A technology without such RAM would need a
  one-word read pipeline in `scan_pass`.
- One collective runs at a time per card. A second request is held in the
  link until the first collective has finished.
