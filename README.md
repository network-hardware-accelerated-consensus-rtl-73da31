# In-network Paxos: coordinator and acceptor pipelines

Paxos lets a group of machines agree on a sequence of values even when some
of them fail. In a software deployment, two of its roles become the
bottleneck. One is the **coordinator**, which orders every request. The
other is the **acceptors**, which vote on each request and send the votes to
every replica. This design moves both roles into network hardware. The
proposers, which submit values, and the learners, which deliver decided
values to the application, stay in software and keep the usual library
interface.

A network device cannot compose new messages. It can only rewrite fields of
the packet passing through it. So every Paxos message shares one header
layout that holds the fields of all message kinds. Each role turns the
message it receives into the next one by rewriting that header in place:

```
proposer --REQUEST--> coordinator --2A--> acceptor 1..n --2B--> learners
```

The RTL here is the hardware half. `caans_coordinator` and `caans_acceptor`
are complete packet pipelines. `caans_top` joins one coordinator and three
acceptors into the deployment that tolerates one acceptor failure.

## The message on the wire

A consensus message is an ordinary UDP datagram. It is recognised by its UDP
destination port (`0x8888` by default, a parameter). The 44-byte Paxos
header sits right behind the UDP header, followed by the application payload.
Byte offsets are counted from the start of the Ethernet frame, and IPv4
options are not allowed:

| bytes  | field   | width | meaning |
|--------|---------|-------|---------|
| 40–41  | UDP checksum | 16 | updated whenever the header is rewritten |
| 42–43  | msgtype | 16 | 0 REQUEST, 1 Phase 1A, 2 Phase 1B, 3 Phase 2A, 4 Phase 2B |
| 44–47  | inst    | 32 | consensus instance number |
| 48–49  | rnd     | 16 | round of the request, or round the sender voted in |
| 50–51  | vrnd    | 16 | round in which the acceptor cast the vote it reports (0 = none) |
| 52–53  | swid    | 16 | id of the device that sent the message |
| 54–85  | value   | 256 | the proposed value, or the value voted for |

All fields are big-endian. The header's size, its field names and their
meanings are the published ones. The individual field widths, the type codes
and the port are this design's choices, made so the fields fill exactly 44
bytes. A test frame of 102 bytes (14 Ethernet + 20 IP + 8 UDP + 44 Paxos +
16 payload) is the size used for all rate figures below.

Frame length never changes. Only bytes 40–85 are ever rewritten, and the UDP
checksum is corrected incrementally (`udp_csum_update`, RFC 1624), so a
receiver can still check the whole datagram. A datagram sent with checksum 0
("not used") keeps 0.

## Coordinator: one counter

The coordinator keeps a single 32-bit register, the next instance number.
A REQUEST frame is bound to that instance and the register counts up. The
frame then leaves as a Phase 2A accept request carrying:

- `inst` = the assigned instance;
- `rnd` = `INIT_RND` (1);
- `swid` = the coordinator's id;
- `value` = the proposer's value, untouched.

All other frames pass through unchanged.

Normal Paxos starts each instance with a Phase 1 in which the acceptors
promise a round. Here that phase is skipped. There is a single coordinator,
so every acceptor starts each instance as if it had already promised round
`INIT_RND`. This is the standard optimisation for a stable leader, and it is
why a request needs only three message hops.

**Fail-over.** A replacement coordinator only needs to know roughly where the
old one stopped. `set_inst` loads the counter for this. A value that is too
low is harmless: acceptors keep rejecting in the instances already decided
until the counter passes them. A value that is too high leaves gaps, which
learners fill with the recover procedure (below).

## Acceptor: the memory of the protocol

Each acceptor keeps a history table with one entry per instance. Each entry
holds:

- `rnd`: the highest round promised or voted in;
- `vrnd`: the round of its vote, 0 if it has not voted;
- `value`: the value voted for.

The match/action stage (`acceptor_ma`) reads the entry of the frame's
instance and applies the two acceptor rules.

* **Phase 2A, round r.** If r ≥ `rnd`, the acceptor votes. It sets
  `rnd := vrnd := r` and `value := msg.value`, and rewrites the frame into a
  Phase 2B vote (`vrnd = r`, `swid` = its own id). If r < `rnd`, it has
  promised a higher round, and the frame is dropped.
* **Phase 1A, round r.** If r > `rnd`, the acceptor promises r (`rnd := r`).
  It answers with a Phase 1B that carries the stored `vrnd` and `value`.
  Otherwise the frame is dropped.

Other message types and non-Paxos frames are forwarded unchanged.

**Recover.** Phase 1A exists here for recovery. A learner that missed
instance k sends a 1A for k with a round above 1, directly to the acceptors.
An acceptor that voted answers with its vote (`vrnd` ≥ 1 and the value). One
that never voted answers `vrnd = 0`, and the learner then proposes a no-op
for k. Choosing and re-proposing the value is the learner's software job; the
hardware only answers truthfully.

**The table is a ring.** The table holds 2^`INST_IDX_W` entries (65,536 by
default) and is indexed by the low bits of `inst`. Instance k and instance
k + 65,536 share an entry. An instance needs its entry only until it is
decided, which takes microseconds. Recovering an instance more than 65,536
instances old is not possible. Trimming old entries in step with application
checkpoints is left to the application and is not part of this hardware.

**Reset.** After reset, `acceptor_history` writes every entry to
`{rnd = INIT_RND, vrnd = 0, value = 0}`, one entry per cycle. That takes
65,536 cycles at the default size. `ready_for_traffic` stays low meanwhile,
and frames wait in the input buffer. In a real device the table would have to
survive power loss (battery-backed RAM or NVRAM) for Paxos to stay safe
across an acceptor restart. This RTL does not model persistence.

At 36 bytes per entry, the default table is 18.9 Mbit, or about 2.4 MB of
on-chip RAM per acceptor. It is written as a plain array with one synchronous
read port and one write port, so it maps to block RAM.

## The pipeline: parser, buffer, match/action, deparser

Both roles use the same pipeline; only the match/action stage differs:

```
 s_* ─► pkt_parser ─┬─► packet buffer (sync_fifo, 64 words) ─────────────┐
                    └─► record queue ─► coordinator_ma / acceptor_ma ─►  │
                                         verdict queue ─► pkt_deparser ◄─┘ ─► m_*
```

* `pkt_parser` copies every word into the packet buffer. It also collects
  bytes 0–85. When the word holding byte 85 has arrived, or the frame ends
  first, it pushes **exactly one record per frame**: whether the frame is
  Paxos, the header fields, and the received checksum.
* The match/action stage turns each record into **exactly one verdict**:
  forward, rewrite with this header and checksum, or drop.
* `pkt_deparser` pairs verdicts and frames in order. No word of a frame
  leaves before its verdict is there. It then streams the frame out and
  overlays bytes 40–85 when the verdict says rewrite. A dropped frame is read
  out of the buffer and discarded.

This one-record, one-verdict rule is what keeps frames and decisions
aligned. It holds for every frame, including short and non-Paxos ones. Any
change to the stages must keep it.

The packet buffer must hold at least the 11 words a frame needs before its
header is complete. Otherwise the parser waits for space the deparser cannot
free. The default of 64 words is comfortable.

**Acceptor schedule.** The acceptor's decision is a read-modify-write on the
history. It takes two cycles per 1A/2A record: read in the first, decide and
write in the second. The next read therefore always sees the previous write,
so two messages for the same instance cannot race. A minimum Paxos frame is
11 words long, so two cycles per header never limits the rate.

## Streams, timing and rates

Every stream port is a 64-bit word bus with:

- `data`: byte 0 of the frame in bits 7:0;
- `keep`: one valid bit per byte;
- `last`: marks the final word of a frame;
- `valid`/`ready`: the handshake.

A word moves when `valid` and `ready` are both high. A sender holds its word
stable until it moves. This is checked by assertions in the parser and
deparser. Reset is synchronous and active low, and the design runs in one
clock domain.

For a 102-byte frame (13 words), tested cycle-exactly:

| path | first word in → first word out | rate |
|------|------|------|
| coordinator | 13 cycles | one word per cycle, one frame per 13 cycles |
| acceptor    | 14 cycles | one word per cycle, one frame per 13 cycles |
| `caans_top`, proposer port → learner port | 27 cycles | same |

At 250 MHz, one frame per 13 cycles is 19.2 M frames/s. That is twice what
a 10 Gb/s link carries at this frame size (about 9.3 M/s). Whether this RTL
closes timing at 250 MHz has not been checked. The published FPGA build,
generated from a P4 program, measured 0.72 µs (coordinator) and 0.79 µs
(acceptor) at 250 MHz, about 180 and 200 cycles. Those figures include
compiler-generated stages that have no counterpart here, so the numbers are
not comparable. The published computed rates of 60–150 M packets/s came from
much wider buses. `DATA_W` is a parameter: at 512 bits a 102-byte frame is
two words. The acceptor's read-modify-write also takes two cycles, so both
pipelines then carry one frame every two cycles (measured by
`tb_wide_bus_rate`). At 300 MHz that is 150 M frames/s.

## The deployment in one top (`caans_top`)

```
prop_* ─► caans_coordinator ─► stream_bcast ─┬─► stream_merge ─► caans_acceptor (swid 1) ─► lrn_*[0]
                                             ├─► stream_merge ─► caans_acceptor (swid 2) ─► lrn_*[1]
bk_*   ─► stream_bcast ──────────────────────┴─► stream_merge ─► caans_acceptor (swid 3) ─► lrn_*[2]
```

* `prop_*` carries REQUEST frames from proposers.
* Each 2A frame is copied to every acceptor by `stream_bcast`. The source
  moves on only when all copies are taken.
* `bk_*` is the backup path, also copied to every acceptor. A software or
  second hardware coordinator sends its 2A frames here after a failure.
  Learners send their recover 1A frames here too.
* In front of each acceptor, `stream_merge` shares the input between the
  primary and backup paths a whole frame at a time, round robin.
* Each acceptor's votes leave on its own `lrn_*` port. Software learners
  count votes per instance by `swid` and deliver at 2 of 3.
* `set_inst`/`next_inst` give access to the coordinator's counter for
  fail-over. `acc_ready` shows which acceptors have cleared their history.

In the published testbed each role is a separate FPGA board, and a switch
connects them. Here they sit side by side on one clock, and `stream_bcast`
stands in for the switch's fan-out. Since each pipeline is self-contained,
`caans_coordinator` and `caans_acceptor` can also be used alone, one per
device, as in that testbed.

## Where this RTL departs from the published design, or goes beyond it

* The published pipelines were generated from P4 source. This is
  hand-written RTL with the same stages: parser, match/action, deparser.
* Field widths, message codes, UDP port, bus width and format, reset
  behaviour, the value `INIT_RND = 1`, and the meaning of `vrnd = 0` as "no
  vote" are this design's own choices.
* Rejected 1A/2A messages are silently dropped. Nothing is sent back.
* After a coordinator fail-over, the published text says that values sent
  for instances the old coordinator already used are not accepted until the
  new one catches up. Here the acceptor applies the plain Paxos rule: a 2A
  is accepted when its round is at least the stored round. A replacement
  coordinator that reused the initial round on an instance that already
  holds a vote would therefore overwrite that vote. A replacement may use
  `INIT_RND` only on instances it knows to be unused. On any other instance
  it must take a higher round and first run Phase 1 (a 1A, as the recover
  path does). The end-to-end test's software coordinator uses round 1 only
  on instances 30 to 34, which the hardware coordinator skipped when it was
  moved on to 100.
* Incremental UDP checksum update is this design's choice. The published
  design only relies on the checksum being valid end to end.
* Addresses are not rewritten. A frame leaves with the Ethernet/IP
  addressing it came with. Steering votes to learners is left to the network,
  for example with multicast.
* One chip holds all four devices, joined by on-chip fan-out and
  arbitration.
* Because the on-chip fan-out waits until every acceptor has taken a word,
  an acceptor whose input or learner port stays blocked stalls the other
  two as well. In a network, a switch would keep forwarding to the
  survivors. A crashed acceptor that stays silent but still drains its
  input does not have this effect. Deployed one role per device, as
  published, the pipelines are independent.
* Not included:
  - proposers and learners, which are software;
  - Ethernet MAC/PHY (vendor IP);
  - persistent acceptor memory;
  - log trimming on checkpoints.

## Parameters

| parameter | default | where | meaning |
|-----------|---------|-------|---------|
| `NUM_ACC` | 3 | `caans_top` | number of acceptors (2f+1, f = 1) |
| `INST_IDX_W` | 16 | top, acceptor | history holds 2^`INST_IDX_W` instances |
| `DATA_W` | 64 | all stream blocks | bus width in bits; multiple of 8, at least 16 (64 and 512 simulated) |
| `PKT_FIFO_DEPTH` | 64 | pipelines | packet buffer words; power of two, ≥ 16 at 64 bits |
| `PAXOS_UDP_PORT` | 0x8888 | pipelines | UDP port that marks Paxos frames |
| `INIT_RND` | 1 | pipelines | initial round; coordinator and acceptors must agree |
| `SWID` | 0x0100 / 1..N | pipelines | sender id written into rewritten headers |

## Files

`rtl/` holds one module or package per file. `caans_pkg.sv` defines the
header struct, message codes, byte offsets and the parser/verdict records.
The other files are the blocks named above. Each file begins with a
description of its function, interface and timing.

`tb/` holds one self-checking testbench per block. Each ends by printing
`TB_RESULT checks=N failures=M`. `tb_pkg.sv` builds complete frames with
correct IPv4 and UDP checksums. It also recomputes UDP checksums from
scratch, so the hardware's incremental update is compared against an
independent calculation. Every testbench uses random stimulus and random
back-pressure:

| testbench | what it establishes |
|-----------|--------------------|
| `tb_caans_top` | Full size (65,536-entry histories). Runs: 40 requests decided by quorum; a stale 2A dropped; contention on the shared acceptor inputs; fail-over via `set_inst`; a software coordinator on the backup path; recover of a decided and an unused instance; loss of any one acceptor (the other two still decide every instance); end-to-end latency 27 cycles. Each mechanism is counted. |
| `tb_caans_acceptor` | Byte-exact output against a reference acceptor over hundreds of 1A/2A/other frames. Covers ring wrap; 14-cycle latency; 13 cycles per frame. |
| `tb_caans_coordinator` | Byte-exact output against a reference coordinator; counter load; 13-cycle latency; 13 cycles per frame. |
| `tb_acceptor_ma`, `tb_coordinator_ma` | The decision stages alone, against reference models; record rates. |
| `tb_acceptor_history` | Clearing time and values; read latency; writes. |
| `tb_pkt_parser`, `tb_pkt_deparser` | Classification of Paxos and non-Paxos frames, field extraction, timing of the record; overlay, drop, ordering, no word before its verdict. |
| `tb_wide_bus_rate` | Coordinator and acceptor at `DATA_W = 512`: 50 back-to-back frames each, byte-exact, one frame every two cycles. |
| `tb_udp_csum_update` | Incremental checksum equals full recomputation. |
| `tb_sync_fifo`, `tb_stream_bcast`, `tb_stream_merge` | Queue behaviour; every copy delivered; frames never interleaved, round robin. |

To simulate one, for example the acceptor:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/caans_pkg.sv tb/tb_pkg.sv -y rtl -y tb +libext+.sv \
    tb/tb_caans_acceptor.sv --top-module tb_caans_acceptor -o sim
./obj_dir/sim
```

The full-size `tb_caans_top` builds in about half a minute and runs in a
couple of seconds. Clearing the three 65,536-entry histories is most of its
simulated time. The testbenches are two-state and initialise everything they
read.
