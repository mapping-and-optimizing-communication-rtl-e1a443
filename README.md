# A hardware gateway between software- and hardware-mapped ROS 2 topics

On an FPGA system-on-chip, ROS 2 nodes can run as software on the CPUs or as
hardware threads in the programmable logic. A topic whose publishers and
subscribers are all in hardware can be a *hardware-mapped topic* (HMT): a
streaming channel inside the logic that never touches main memory. As soon as
one member of the topic is in software, the topic falls back to a
*software-mapped topic* (SMT), whose message buffers live in main memory. Then
every hardware subscriber fetches its own copy of every message through the
one memory port that all hardware threads share. With eight hardware
subscribers, the same image crosses that port eight times.

A **gateway** removes the repetition. It splits the mixed topic into an SMT for
the software members and an HMT for the hardware members. A small hardware
thread, the **gateway core**, subscribes to both halves and republishes on the
other. Each message then crosses the hardware/software boundary exactly once;
the fan-out to the hardware subscribers happens on the HMT.

This repository holds synthesizable SystemVerilog for the gateway, after
C. Lienen, A. P. Nowosad and M. Platzner, *Mapping and Optimizing
Communication in ROS 2-based Applications on Configurable System-on-Chip
Platforms*. The state machine of the gateway core and the message filters
follow that paper. The paper's gateway was written in C++ for high-level
synthesis and runs on the ReconROS/ReconOS framework. The wire-level protocols,
the HMT's internals and the message format used here are this design's own
(see "Where this RTL departs from, or goes beyond, the paper").

## Structure

```
                 software side                 |             programmable logic
                                               |
  software publishers --> SMT --> software     |   hw publisher nodes ---+
                          ^  |    subscribers  |                         v
           delegate thread|  |                 |  gateway core pub --> hmt_topic --> hw subscriber nodes
            (ROS 2 calls) |  v                 |                         |
                       OSIF FIFOs <------------+--> gateway_core          +--> msg_filter --> gateway core sub
           main memory <- MEMIF FIFOs <--------+-->    (FSM)
                                               |
                                               |   ros_gateway = hmt_topic + msg_filter + gateway_core
```

| Module | Role |
|---|---|
| `gw_pkg` | OSIF command codes, MEMIF command format, message framing, FSM state type |
| `gateway_core` | The runtime state machine: startup, polling, SMT→HMT and HMT→SMT transfers, cancel-and-check, SMT-side filter |
| `hmt_topic` | The hardware-mapped topic: per-message arbitration of publishers, lock-step broadcast to all subscribers |
| `msg_filter` | The HMT-side publisher-ID filter in front of the gateway core's subscriber port |
| `ros_gateway` | Top: one gateway with `NUM_HW_PUB` hardware publisher and `NUM_HW_SUB` hardware subscriber ports |

The software half is outside the RTL. The gateway reaches it through two FIFO
pairs, the usual interfaces of a ReconOS hardware thread:

* **OSIF**, to its *delegate thread*. This software thread makes the ROS 2
  calls on the gateway's behalf: it hands out the output buffer, blocks in a
  take, cancels the take, and publishes.
* **MEMIF**, to main memory through the platform's memory subsystem.

## Message format

In main memory and on the HMT stream alike, a message is a sequence of 32-bit
words:

| word | content |
|---|---|
| 0 | publisher ID |
| 1 | payload length N, in words |
| 2 … N+1 | payload |

On a stream, `last` is set on the final word (on word 1 when N = 0). The
publisher ID travels with the message because the filters need it. When the
gateway republishes a message, it writes its own ID for that side:
`SMT_PUB_ID` into messages it puts on the SMT, and `HMT_PUB_ID` into messages
it puts on the HMT.

## The gateway core state machine

The gateway core is one FSM (`gateway_core.sv`). The states below are the ones
in the paper's runtime diagram. Each is split into single-word steps (`ST_*`
in `gw_pkg`), because every OSIF, MEMIF or HMT word is its own handshake.

```
Start -> Get SMT Output Message Location -> Start SMT Message Request -> Check SMT
Check SMT  --no SMT message-->  Check HMT  --no HMT message-->  Check SMT   (idle loop)
Check SMT  --new SMT message--> Transfer Main Memory -> HMT  -> Start SMT Message Request
Check HMT  --new HMT message--> Transfer HMT -> Main Memory
           -> Cancel and Check SMT Message Request + Publish to SMT
                 --new SMT message--> Transfer Main Memory -> HMT
                 --no SMT message-->  Start SMT Message Request
```

**Startup.** The core sends `GET_OUT_LOC` and stores the returned address. It
writes every HMT message for the SMT to this *output location*.

**Waiting.** The core sends `SUB_REQUEST`. The delegate blocks in a ROS 2 take
and replies with a message pointer only when a software message arrives. The
core does not wait for that reply. It alternates between *Check SMT* (is there
a word in the OSIF reply FIFO?) and *Check HMT* (is a message offered on its
HMT subscriber port?), one cycle each. A new message on either side is
therefore noticed within two cycles.

**SMT → HMT.** The core reads the 2-word header at the pointer through the
MEMIF. If the publisher ID is `SMT_PUB_ID`, the message is the gateway's own
earlier publication coming back through its own SMT subscription. The core
drops it without reading the payload (the SMT-side filter). Otherwise it
publishes `{HMT_PUB_ID, N}` on the HMT, issues one MEMIF read of N words, and
streams the read data straight into the HMT. There is no buffer in between. It
then sends a fresh request.

**HMT → SMT, and the cancel race.** This is the subtle part. The core takes
the message off the HMT and writes `{SMT_PUB_ID, N, payload}` to the output
location with one MEMIF write. Before it can publish, it has to withdraw the
outstanding take, because the delegate is a single thread that is blocked in
that take. It sends `SUB_CANCEL`. A software message may have arrived after
the request but before the cancel. The delegate then either has already sent
the pointer or sends it as the cancel's reply. Either way, **exactly one word
comes back for each request/cancel pair**:

* `0`: nothing arrived, and the take is cancelled;
* a pointer: a message arrived, and the take is complete.

The core stores that word and sends `PUBLISH`. When the publish has been
acknowledged, a non-zero stored pointer sends the core to *Transfer Main
Memory → HMT* with that message. Otherwise it issues a new request. This
exactly-one-reply rule is the contract a delegate thread must keep. The
behavioural delegate in `tb/sw_side_model.sv` implements it.

Publishing comes after the cancel, as in the paper. Had the core published
first, the delegate would have had to serve a publish while blocked in a take.

## Loop avoidance: the two filters

The gateway subscribes to both halves of the topic and publishes on both, so
each republished message comes straight back to it. Without filtering it would
bounce between SMT and HMT for ever. Each subscriber of the gateway therefore
discards messages that carry the gateway's own publisher ID for that side:

* **SMT side** (inside `gateway_core`): the ID is checked in the header that is
  read first. Dropping such a message costs two MEMIF words.
* **HMT side** (`msg_filter`): the filter looks at word 0 of each message
  offered to the gateway core's subscriber port. If it is `HMT_PUB_ID`, the
  filter consumes the whole message by itself, whatever the core is doing, and
  nothing reaches the core. Any other message passes through as plain wires.

The filter drains on its own for a reason. On the HMT, the gateway is both a
publisher and a subscriber of its own messages. While it streams a message
into the HMT, its core is busy and cannot accept words. The filter accepts
them instead, so the broadcast can proceed.

## The hardware-mapped topic

`hmt_topic` connects `NUM_PUB` publisher streams to `NUM_SUB` subscriber
streams. The paper uses the HMTs of an earlier framework and does not give
their insides. This one is the simplest structure that works with a gateway on
it:

* **Lock-step broadcast.** A word moves only when every subscriber is ready,
  and then it moves to all of them in the same cycle. Nothing is buffered. The
  data and `last` lines are shared. Subscriber *i* sees `valid` only while all
  other subscribers are ready. A word counts as taken in the cycle where
  `valid` and `ready` are both high. Unlike AXI-Stream, `valid` may drop again
  before that cycle, when another subscriber stops being ready. The same then
  holds for the gateway core's MEMIF write words, which come straight from the
  HMT; a FIFO-style MEMIF does not mind. A subscriber's `ready` must not
  depend on its own `valid`; otherwise a combinational loop forms.
* **Per-message arbitration that commits late.** Until the first word of a
  message has been taken, the topic offers a different waiting publisher each
  cycle (round robin). Once the first word is taken, it locks onto that
  publisher until `last`.

Late commitment is what keeps a gateway from deadlocking. The gateway core
accepts a message start only in *Check HMT*. Suppose the topic committed to a
hardware publisher whose first word the gateway is not taking, while the
gateway waits to publish an SMT message. Then each side would wait for the
other. With late commitment, the topic keeps rotating. The gateway's own
message can always start, because its filter accepts it at once. A foreign
message starts only when the gateway is ready for it. Hardware subscribers
only need to become ready eventually.

## Interfaces

**OSIF** (`osif_hw2sw_*` out, `osif_sw2hw_*` in; 32-bit, valid/ready):

| command (hw→sw) | code | reply (sw→hw) |
|---|---|---|
| `GET_OUT_LOC` | `0xA1` | address of the output message buffer |
| `SUB_REQUEST` | `0xA2` | later: pointer to a new SMT message |
| `SUB_CANCEL` | `0xA3` | `0`, or the pointer of a message that raced the cancel; nothing if that pointer was already sent |
| `PUBLISH` | `0xA4` | one acknowledgement word, after the message at the output location is published |

**MEMIF** (`memif_hwt2mem_*` out, `memif_mem2hwt_*` in; 32-bit,
valid/ready). A transfer is a command word `{bit 31 = write, bits 23:0 = byte
count}`, an address word, and then either the write data on `hwt2mem` or the
read data returned on `mem2hwt`. The core writes with one command per message,
which limits a message to 2^24 bytes including its header (about 16 MiB). The
memory subsystem must complete the writes before the delegate reads the
message for `PUBLISH`.

**HMT ports of `ros_gateway`**: `hw_pub_*[NUM_HW_PUB]` (data, last, valid,
ready) and `hw_sub_valid/ready[NUM_HW_SUB]`, with shared `hw_sub_data` and
`hw_sub_last`.

**Status**: `core_state` and one-cycle pulses `ev_smt2hmt`, `ev_hmt2smt`,
`ev_cancel_hit`, `ev_smt_filtered`, `ev_hmt_filtered`, plus
`ev_hmt_msg_done`/`ev_hmt_msg_src`.

Reset is synchronous and active low. All logic runs on one clock.

## Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `NUM_HW_PUB` | 1 | hardware publisher ports (the paper's measurements use one publisher) |
| `NUM_HW_SUB` | 8 | hardware subscriber ports (the paper measures 2, 4 and 8) |
| `SMT_PUB_ID` | `0x0B01` | ID the gateway publishes under on the SMT |
| `HMT_PUB_ID` | `0x0A01` | ID the gateway publishes under on the HMT |

The HMT inside the top has `NUM_HW_PUB + 1` publishers and `NUM_HW_SUB + 1`
subscribers. The extra port of each kind is the gateway core's, on the highest
index. Unused subscriber ports should have `ready` tied to 1.

## Timing and cost

* Payload moves at one word per cycle when the other side keeps up. This holds
  in both directions: MEMIF read data goes straight into the HMT, and HMT words
  go straight into MEMIF writes.
* Each message has a fixed overhead on top of its payload:
  * SMT→HMT: 4 MEMIF command/address words, 2 header words read back, and 2
    header words on the HMT, plus the OSIF request and its reply.
  * HMT→SMT: 2 MEMIF command/address words, 2 header words written, and 4 OSIF
    words (cancel, reply, publish, acknowledgement).
* With no stalls, a message of N payload words reaches all hardware
  subscribers N + 7 cycles after a hardware publisher offers it, or N + 10
  cycles after a software message is handed over. The software side sees a
  hardware message N + 10 cycles after it is offered (measured by
  `tb_workload_transfer`).
* Main-memory traffic per message is N + 2 words for any number of hardware
  subscribers. A hardware→software message adds 2 words, because its echo's
  header is read back. An SMT-only mapping would move N + 2 words per hardware
  subscriber. The workload test prints both figures.
* After synthesis (generic cells, `NUM_HW_SUB = 8`), the gateway is about 280
  word-level cells and 172 flip-flops. It has no memories.

These cycle counts describe this RTL and its idealised test environment. They
are not the paper's measurements, which include software, the operating system
and DRAM.

## Where this RTL departs from, or goes beyond, the paper

These follow the paper:

* the three-part split into SMT, HMT and gateway core;
* the states and transitions of the gateway core;
* the order "write to memory, cancel, publish";
* a cancel that may return a message;
* a publisher-ID filter in both of the gateway's subscribers;
* the sizes of the measurement setup.

The following are this design's own choices:

* The paper's gateway is C++ compiled by high-level synthesis. This is
  hand-written RTL of the same behaviour.
* OSIF command codes, the one-reply-per-request/cancel contract, and `PUBLISH`
  without arguments.
* The MEMIF word format, following ReconOS convention, with one command per
  message (the 16 MiB limit).
* The message framing (ID and length words) and the rule that the gateway
  rewrites the ID.
* The SMT-side filter reads only the header of a dropped message. The HMT-side
  filter drains the gateway's own messages on its own.
* The whole `hmt_topic`: lock-step broadcast and late-committing round-robin
  arbitration.
* Widths (32 bits), reset style, and the status outputs.

Not built, because the paper does not design them or they are not logic:

* the software delegate thread and the SMT (ROS 2 software);
* the ReconOS OSIF/MEMIF plumbing, and the memory subsystem with its arbiter,
  MMU and burst generator;
* the application nodes;
* the processing system and DRAM.

The paper's communication-mapping method, which decides per topic between
software, hardware and gateway, is a design-time procedure and has no RTL.

Known limitations:

* A message larger than 16 MiB would need the MEMIF transfer split into
  several commands.
* A hardware subscriber whose `ready` waits for `valid` would form a
  combinational loop through `hmt_topic`.
* The core trusts the length word. An assertion checks that `last` agrees with
  it.

## Verification

Each testbench checks itself and ends with a `TB_RESULT checks=… failures=…`
line. The environment models are in `tb/`:

* `sw_side_model`: main memory behind a MEMIF, the delegate thread, the SMT,
  and a software subscriber that checks every payload;
* `hw_pub_model` and `hw_sub_model`: hardware publisher and subscriber nodes.

All models stall at random. Payload word i of a message is a hash of (seed, i),
with the seed in word 0, so every receiver checks every word independently.

| Testbench | What it shows |
|---|---|
| `tb_msg_filter` | own messages dropped whole, foreign ones intact and in order; own messages drain while the output is blocked |
| `tb_hmt_topic` | 3 publishers × 3 subscribers under contention: no interleaving, per-publisher order, every subscriber gets everything; N-word message in N+2 cycles |
| `tb_gateway_core` | idle polling alternates each cycle; both directions in order and intact; every echo dropped after its header; a software message arriving mid-transfer is returned by the cancel |
| `tb_ros_gateway` | whole gateway at default size (1 publisher, 8 subscribers): all traffic patterns; one memory crossing per message; counts that each mechanism happened (SMT→HMT, HMT→SMT, cancel hit, both filters, HMT contention, idle polling) |
| `tb_workload_transfer` | the measurement setup: hardware or software publisher, 2/4/8 hardware subscribers, 10 kB / 100 kB / 1 MB / 10 MB images (2,500 … 2,500,000 words, decimal units); checks delivery, memory traffic and one word per cycle |

To run one with Verilator 5 (from the repository root):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb --top-module tb_ros_gateway \
    rtl/gw_pkg.sv tb/tb_pkg.sv rtl/msg_filter.sv rtl/hmt_topic.sv rtl/gateway_core.sv \
    rtl/ros_gateway.sv tb/sw_side_model.sv tb/hw_pub_model.sv tb/hw_sub_model.sv \
    tb/tb_ros_gateway.sv -o sim
./obj_dir/sim
```

For `tb_workload_transfer`, add `tb/gw_workload_bench.sv` and change the top
module. It takes about 15 s and needs about 100 MB for the three simulated
main memories. The block testbenches need only their own module plus the
package and the models they instantiate. The models are behavioural and not
synthesizable. They use `$urandom`, so each run follows a different random
traffic pattern.
