# fpgaDDS fabric: ROS 2 topics as on-chip stream networks

In a ROS 2 application, nodes exchange data by publishing to and subscribing from
named *topics*. When several nodes run as hardware accelerators on the same FPGA, the
standard route for such a message goes through software: the publishing node writes
it to shared DRAM, a CPU-side middleware (a DDS implementation) hands it over, and the
subscribing node reads it back from DRAM. fpgaDDS ("Lienen, Middeke, Platzner:
*fpgaDDS: An Intra-FPGA Data Distribution Service for ROS 2 Robotics Applications*")
removes that detour for topics whose publishers and subscribers are all in hardware:
each such topic becomes a small, statically generated AXI4-Stream network on the
fabric, a **hardware-mapped topic (HMT)**. A message then crosses the chip once, at
one word per clock cycle, without touching memory or the CPU.

This repository holds synthesizable SystemVerilog for that communication fabric: the
pieces an HMT is built from, the adapters that turn a node's message into a stream and
back, the two-topic example architecture of the publication as a top level, and
testbenches, including the publication's transfer-time experiment and its
autonomous-vehicle topic graph. The application nodes themselves (image filters, lane
detection and so on) are not part of the fabric and are represented in the
testbenches by a behavioural model.

## 1. A topic is a stream network

A topic has P publishers and S subscribers, fixed at build time. The HMT for it is
composed from three pieces, chosen by P and S:

```
 publisher 0 ─┐                                ┌─> subscriber 0
 publisher 1 ─┼─> axis_msg_arbiter ──> axis_broadcast ─┼─> [axis_fifo] ─> subscriber 1
     ...     ─┘   (only if P > 1)      (only if S > 1)  └─> subscriber S-1
```

* P = 1 and S = 1: a plain stream connection. No logic, no latency.
* P > 1: `axis_msg_arbiter` merges the publishers, forwarding whole messages.
* S > 1: `axis_broadcast` copies every word to all subscribers.
* Any subscriber may get an `axis_fifo` in front of it (bit i of `SUB_FIFO`).

`hmt` is this composition, parameterised by `NUM_PUB`, `NUM_SUB`, `SUB_FIFO` and
`FIFO_DEPTH`. There is no addressing and no routing: every topic has its own wires, so
topics never compete with one another for bandwidth. Only publishers of the *same*
topic compete, and that is why a message's transfer time grows with the number of
publishers on its topic but not with the number of subscribers.

The stream is AXI4-Stream with 64-bit `TDATA` and `TLAST` (`fpgadds_pkg::axis_beat_t`).
`TLAST` marks the last word of a serialized message and is the only framing
information on the wire. The 64-bit width is not stated by the publication. It is the
width at which the publication's measured fpgaDDS transfer times come out as exactly
one word per 100 MHz cycle (3146 kB in 3.93 ms is 8 bytes per cycle). Section 7 shows
that the RTL reproduces those times.

## 2. Arbitration on whole messages

This is the part of the fabric where ordering matters most. If two nodes publish on
the same topic at once, their words must not interleave: a subscriber de-serializes
words in order and would assemble garbage. `axis_msg_arbiter` therefore grants the
topic per message, not per word:

* While no message is in flight, it picks among the publishers whose `TVALID` is high,
  round robin starting after the one served last. The picked input goes straight
  through to the output in the same cycle, so there is no added latency.
* Once a word has been presented and not accepted in the same cycle, the choice is
  *locked*. An AXI4-Stream sink may hold `TREADY` low, and a presented word must then
  stay unchanged. The lock keeps a newly arriving, "earlier" publisher from
  replacing it.
* The lock is released when the word with `TLAST` is accepted. The next message can
  follow in the very next cycle, so back-to-back messages from different publishers
  run at full rate.

A one-word message (`TLAST` on its first word) that is accepted at once never locks.

The publication uses a vendor AXI Interconnect configured for message-granular
arbitration here. The round-robin order is this design's choice; the publication
only says that inputs are arbitrated by complete messages.

## 3. Broadcast, back-pressure and "Keep All / Reliable"

ROS 2 topics have quality-of-service settings. The fabric provides *Keep All* and
*Reliable* delivery: no message is ever dropped. In hardware this simply means
back-pressure. A subscriber that is not ready stalls its topic, and the stall reaches
the publisher, whose publish call then blocks.

`axis_broadcast` implements this for several subscribers without forcing them into
lock-step. Each output has a *done* flag. A subscriber that accepts the current word
sets its flag and sees no valid word until the others have caught up. When every
subscriber has taken the word (flag set, or ready now), the input word is retired
and all flags clear. So a fast subscriber never receives a word twice, a slow one
never misses one, and the topic runs at the speed of its slowest subscriber. Output
`TVALID` never depends on the same output's `TREADY`, as AXI4-Stream requires.

## 4. Subscriber FIFOs

A subscriber that is busy elsewhere would stall its whole topic, and with it every
other subscriber. An `axis_fifo` in front of it decouples the two. The topic can
deliver up to `DEPTH` words while the node is busy, and the node reads them later.
This is what the case-study application uses for its asynchronous stop/start
commands. When the FIFO is full it deasserts `s_ready`, and the topic blocks. How
many messages a topic can buffer is therefore `DEPTH` divided by the message length
in words.

The FIFO is a circular buffer with an occupancy counter. The head word is read from
the array combinationally, and a word written in one cycle can be read in the next.
`DEPTH` defaults to 512 words (one 36 Kb block RAM at 65 bits) and must be a power of
two. The publication does not give a depth.

## 5. DDS adapters: messages in, messages out

A ROS message is a typed, possibly nested structure. The publication flattens each
message type into its list of primitives and arrays, and generates hardware (through
HLS macros) that writes them one after another onto the stream, or reads them back.
Here this is done in a type-independent way. The flattened message lives in the
node's local memory as consecutive 64-bit words, and how the node packs its fields
into words is up to the node.

**`dds_pub_adapter` (publish).** The node pulses `start` with `len` (≥ 1 words). The
adapter reads the node's memory through `rd_addr`/`rd_data`. This read port has zero
latency: `rd_data` must show the word at `rd_addr` in the same cycle. The adapter
presents word 0 in the next cycle and then one word per accepted cycle, with `TLAST`
on word `len-1`. `done` pulses when that last word is accepted. Publishing always
blocks: a stalled topic simply holds the adapter. No non-blocking publish is offered,
because an AXI4-Stream master may not withdraw a word it has presented.

**`dds_sub_adapter` (take).** The node pulses `start` and chooses the version with
`blocking`:

| call          | nothing waiting on the topic              | message waiting / arriving     |
|---------------|-------------------------------------------|--------------------------------|
| blocking      | waits                                     | receives it                    |
| non-blocking  | `done` next cycle with `ok = 0`, topic untouched | receives it                |

While receiving, the adapter writes word i to node memory address i
(`wr_en`/`wr_addr`/`wr_data`). In the cycle after the `TLAST` word it raises `done`,
with `ok = 1` and `count` set to the number of words. `count` and `ok` hold until the
next call. Message lengths are carried in `LEN_W = 19` bits, which covers 4 MiB
messages (the largest evaluated message is 3 MiB).

## 6. The example architecture (`fpgadds_top`)

The top level is the publication's illustration of the fabric: six hardware nodes and
two topics. It uses every building block.

```
 node 1 ──┐
          ├─> HMT A (arbiter) ──> FIFO (512) ──> node 4
 node 2 ──┤
          └─┐
 node 2 ──┐ (node 2 publishes on both topics)
          ├─> HMT B (arbiter -> broadcast) ──┬──> node 5
 node 3 ──┘                                  └──> node 6
```

Every node connection has its adapter inside the top. The node side of each adapter
is a port of the top, so the top's ports are what the six nodes would connect to.
Port arrays are indexed by connection:

| index | publisher ports `pub_*`  | subscriber ports `sub_*` |
|-------|--------------------------|--------------------------|
| 0     | node 1 on topic A        | node 4 on topic A        |
| 1     | node 2 on topic A        | node 5 on topic B        |
| 2     | node 2 on topic B        | node 6 on topic B        |
| 3     | node 3 on topic B        | —                        |

Size after generic synthesis at default parameters: about 390 word-level cells and
315 flip-flop bits, plus the FIFO's 512 × 65 memory bits.

## 7. Timing

All numbers are in clock cycles and were checked in simulation.

| path                                                   | cycles                         |
|--------------------------------------------------------|--------------------------------|
| arbiter, broadcaster, 1:1 topic: input to output       | 0 (combinational)              |
| FIFO: write to readable                                | 1                              |
| publish `start` to first word on the stream            | 1                              |
| L-word message, publish start to end of take, no FIFO  | L + 1                          |
| same, through a subscriber FIFO                        | L + 2                          |
| two publishers on one topic, L words each              | second message ends at 2L + 2  |
| S subscribers instead of one                           | unchanged                      |

At 100 MHz this reproduces the publication's fpgaDDS transfer times. Sizes are read as
images of 3·N·N bytes; the publication gives only rounded kB values.

| message          | words  | cycles | time at 100 MHz | published |
|------------------|--------|--------|-----------------|-----------|
| 3 kB (32²·3 B)   | 384    | 385    | 0.004 ms        | < 0.01 ms |
| 12 kB            | 1536   | 1537   | 0.015 ms        | 0.02 ms   |
| 50 kB            | 6144   | 6145   | 0.061 ms        | 0.06 ms   |
| 196 kB           | 24576  | 24577  | 0.246 ms        | 0.24 ms   |
| 786 kB           | 98304  | 98305  | 0.983 ms        | 0.98 ms   |
| 3146 kB          | 393216 | 393217 | 3.932 ms        | 3.93 ms   |

The critical combinational path of a topic runs from a publisher's `TVALID`, through
the arbiter's pick, the broadcaster's ready reduction and back to the publisher's
`TREADY`. For topics with many publishers or subscribers at high clock rates, a
register slice can be added at the topic output without changing the behaviour
(one more cycle of latency).

## 8. Execution modes and the case-study topic graph

Because a node reads and writes its topics as streams, a node can work in one of two
ways. It can receive the whole message, compute, and then send (*sequential*). Or, as
an HLS dataflow design, it can overlap the three phases and start sending results
while input is still arriving (*dataflow*). This is a property of the nodes, not of
the fabric. The fabric supports both, since a stream can be consumed as it arrives.

`tb/tb_av_fabric.sv` builds the publication's autonomous-vehicle application from
`hmt` instances:

| topic | publisher                   | subscribers                                    | message (words)        |
|-------|-----------------------------|------------------------------------------------|------------------------|
| A     | image compensation          | Gaussian blur, red-light det., green-light det. | 640×480×3 B = 115200   |
| B     | Gaussian blur               | image projection                               | 115200                 |
| C     | image projection            | lane following                                 | 1000×600×3 B = 225000  |
| D     | lane following              | lane control                                   | centre point, 3        |
| E     | red-light detection         | lane control (FIFO), green-light det. (FIFO)   | stop command, 1        |
| F     | green-light detection       | lane control (FIFO), red-light det. (FIFO)     | start command, 1       |

The 1000×600 projection size is from the publication. The 640×480 camera, 3 bytes per
pixel, the 3-word point and the 1-word commands are assumptions. The nodes are
`tb/hw_node_model.sv` instances whose compute phase is assumed to take one cycle per
input word. Chain α runs from a camera frame entering image compensation to its
centre point reaching lane control. For the first frame it takes 1,141,203 cycles
(11.4 ms) with all nodes sequential and 225,004 cycles (2.25 ms) in dataflow mode. The
sequential figure equals the sum of the phases: 6 × 115200 + 2 × 225000 + 3. The
published 20.58 ms also contains the real nodes' computation, which is not modelled
here, so only the fabric's share can be compared.

## 9. What follows the publication, and what is this design's own

Follows the publication:
* one static stream network per topic;
* a plain connection for 1:1 topics;
* merging of several publishers with arbitration by complete messages;
* broadcast to several subscribers;
* arbiter and broadcaster chained for any P and S;
* optional subscriber FIFOs that block the topic when full;
* Keep-All / Reliable delivery;
* blocking and non-blocking receive;
* the two-topic example topology and the case-study topic graph.

This design's own choices (the publication is silent on them):
* the 64-bit width, derived from the measured throughput, and `TLAST` as the only
  side-band signal;
* round-robin arbitration;
* the done-flag broadcaster;
* FIFO depth 512 and its combinational head read;
* the adapters' word-memory interface and zero-latency read port;
* the exact non-blocking semantics (decided in the cycle of the call);
* active-low asynchronous reset.

Departures from the publication:
* The publication instantiates vendor IP (AXI Interconnect, AXI Broadcaster, AXI
  FIFO) and HLS-generated adapters. Here all of them are plain RTL with the same
  function. Their internal timing (register slices, latencies) will differ from the
  vendor blocks.
* Non-blocking *publish* is not provided (see section 5).
* The case-study figure labels the topic from lane following to lane control "F" in
  its architecture view, but "D" in its computation graph, where F is the
  green-light start command. The testbench uses D.
* No part of the surrounding ReconROS system is modelled: OS and memory interfaces,
  delegate threads, CPU, DRAM. Nor are the application nodes.

## 10. Files

| file | contents |
|------|----------|
| `rtl/fpgadds_pkg.sv` | widths, `axis_beat_t` |
| `rtl/axis_msg_arbiter.sv` | N:1 message-granular arbiter |
| `rtl/axis_broadcast.sv` | 1:N broadcaster |
| `rtl/axis_fifo.sv` | subscriber FIFO |
| `rtl/hmt.sv` | one hardware-mapped topic |
| `rtl/dds_pub_adapter.sv`, `rtl/dds_sub_adapter.sv` | serializing / de-serializing adapters |
| `rtl/fpgadds_top.sv` | two-topic example architecture |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_hmt_transfer.sv` | transfer-time experiment (all six message sizes) |
| `tb/tb_av_fabric.sv`, `tb/hw_node_model.sv` | case-study topic graph, both execution modes |

Modules carry concurrent assertions for the AXI4-Stream rule (a presented word stays
unchanged until accepted) and for FIFO overflow.

## 11. Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and ends; `failures=0` is a
pass. Each has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_fpgadds_top \
    -y rtl -y tb +libext+.sv rtl/fpgadds_pkg.sv tb/tb_fpgadds_top.sv
./obj_dir/Vtb_fpgadds_top
```

Replace `tb_fpgadds_top` by any other testbench name. The package must be given
first; Verilator finds the other modules in `rtl/` and `tb/` by name.
`tb_fpgadds_top` runs the top at its default sizes. It counts and requires each
mechanism of the fabric:
* message arbitration on both topics;
* the 512-word FIFO filling and blocking its publishers;
* a broadcast stall caused by one slow subscriber;
* a non-blocking take on an empty topic;
* the latencies of section 7.

The block testbenches use small sizes (for example an 8-deep FIFO). They drive random
traffic and check against reference models or self-describing data: every word
carries its source, message number and index.

To build a different topic graph, instantiate one `hmt` per topic with its publisher
and subscriber counts and a `SUB_FIFO` mask, and put a `dds_pub_adapter` or
`dds_sub_adapter` (or a node that speaks AXI4-Stream directly) at each end.
