# Two-part QoS arbitration for a shared on-chip target

Several initiators on a chip (a processor, video and audio engines, a display
controller, slow peripherals) often share one target, such as an on-chip SRAM
or a DRAM controller. Their needs conflict. The processor stalls on every cache
miss, so it wants the lowest possible latency. The stream engines do not care
much about latency, but they need a guaranteed bandwidth with bounded jitter, or
their buffers overflow or run dry. Fixed priority gives the processor its
latency but lets it starve the streams when it misses often. A TDMA wheel
protects the streams but makes the processor wait for its slot even when the
target is idle.

The scheme implemented here gets both. It splits arbitration in two:

* **In the core of the network**, at every arbitration point, requests are
  chosen by a simple and fast rule: strict priority between three QoS levels,
  and an *epoch* scheme between requests of the same level. The arbitration
  points hold no bandwidth accounting and know nothing about the initiators'
  shares.
* **At the edge of the network**, next to the target, one *credit counter* per
  thread measures whether the thread is using more than its allocated share of
  the target. A thread that is over its allocation is *demoted*: a one-bit
  sideband signal per thread goes back to every arbitration point, which then
  treats that thread as best effort.

A **thread** is a virtual channel to the target with its own buffering in the
network, a QoS level and a bandwidth allocation. The three levels are, highest
first:

| level       | meaning                                                                                  |
|-------------|------------------------------------------------------------------------------------------|
| priority    | served ahead of everything while within its allocation: lowest latency                  |
| bandwidth   | served ahead of best effort while within its allocation: guaranteed throughput          |
| best effort | served when the others leave cycles over; demoted threads join this level               |

A priority thread therefore sees a one-cycle service latency as long as it asks
for less than its allocation; once it asks for more, it falls back to its
allocated share and can no longer hurt the bandwidth threads.

## The system

The RTL builds the four-initiator, one-target system below. Each initiator is
assigned to a thread by the `init_thread` input. In the usual set-up the thread
number is the initiator number, so every initiator has a thread of its own.
Initiators may also share a thread. Their requests then travel and are counted
as one thread, and the epoch scheme merges them wherever their paths join.

```
  CPU  (0) -- epoch_marker ----------------------------------+
  MPEG (1) -- epoch_marker ----------------------------------+
                                                             +-- arb point 2 -- qos_edge -- mem_target
  VID  (2) -- epoch_marker --+                               |       ^             |            |
                             +-- arb point 1 -- staging -----+       |   demote    |            |
  GEN  (3) -- epoch_marker --+        ^         buffers              |  (sideband) |            |
                                      +------------------------------+-------------+            |
  responses <--------------------------------- resp_net <---------------------------------------+
```

VID and GEN meet at the first arbitration point. Its output crosses a link into
one staging FIFO per thread (four FIFOs, so any thread may cross) and meets CPU
and MPEG at the second point. The
target is an SRAM with an 8-byte port, one access per cycle and a latency of
one cycle. At 200 MHz this is 1.6 GB/s, so one request per cycle is the whole
target bandwidth.

Requests are single words. An initiator's burst is a series of word requests,
and arbitration is done per request, so bursts of different initiators
interleave.

## Epoch arbitration

This is the least obvious part of the design.

### Markers

Each initiator's boundary block (`epoch_marker`) sets a marker bit on the first
of every `epoch_size` requests. Requests from one marker up to the next form one
*epoch* of that initiator. The epoch size is set per initiator, and it is the
only place the size exists: the arbitration points only see the marker bits.

### The rule at an arbitration point

An arbitration point serves its branches in rounds, one epoch of each branch per
round:

1. A branch that has already been served in the current round and now shows a
   request with a marker (the start of its next epoch) is held back.
2. When every branch is either held back or has nothing to send, the round
   ends: all branches may compete again.
3. Among the branches that may compete, the **least recently serviced** wins.
   This interleaves requests of the same round finely.

With three branches whose streams are (number = epoch, `*` = marker)

```
  A: 1* 1  2* 2        B: 1* 1  1  2*        C: 1* 2*
```

the point sends `A B C A B B` (the six epoch-1 requests), then `A C B A`
(epoch 2), one request per cycle. The round ends in the same cycle it is
detected, so no cycle is lost at epoch boundaries. The share of the target a
branch gets when everybody is busy is its epoch size divided by the sum of the
epoch sizes; a branch that is idle does not hold the others up. Because the
rule only looks at markers, it works the same at every point of an arbitration
tree, whatever its shape.

### Regenerated markers

The request that a point forwards carries a marker when it opens a new round
of its thread at that point. A later point therefore sees one marker per
combined epoch and applies the same rule again, without knowing what was
merged before it.

### Two stages in `qos_arb_point`

Each input branch carries one thread (threads have their own buffers). The
point chooses in two stages, all combinationally in one cycle:

1. **Within a thread**: the epoch rule above among the branches of that thread
   (branches that carry initiators sharing a thread), with a least-recently-
   serviced tie-break per thread. This yields one candidate per thread and
   whether that candidate opens a new epoch of the thread.
2. **Between threads**: the effective level of each thread is its configured
   level, or best effort if its `demote` bit is set. The highest level that has
   a candidate wins (strict priority). Threads at that level share by the same
   epoch rule, now applied to the thread-level markers of stage 1, with a
   second least-recently-serviced tie-break.

A thread is only a candidate when the next stage has room for it
(`out_thr_ready`), so `out_valid` is only raised when the request is taken in
that cycle. The point holds no request register: a request that meets no
competition passes through in the cycle it arrives.

## Credit counters and demotion

`qos_edge` sits between the last arbitration point and the target and wires the
request straight through. For each thread it holds

* `alloc_tick`, the periodic event: an accumulator that adds `alloc_num` every
  cycle and emits a tick and subtracts `alloc_den` whenever it reaches
  `alloc_den`. The tick rate is exactly `alloc_num/alloc_den` of the target
  cycles: 1/4 ticks every fourth cycle, 3/20 (15%) ticks 3 times in 20 cycles.
* `credit_counter`, a signed count that starts at 0, gains 1 per tick and
  loses 1 per request of the thread accepted by the target, and saturates at
  `pos_limit` (>= 0) and `neg_limit` (<= 0).

A priority or bandwidth thread is demoted while its count is negative.
Best-effort threads are never demoted. The count is a moving record of usage
against allocation: 0 means the thread got exactly its share.

The two limits are the tuning knobs:

* `pos_limit` is how far a thread may burst above its allocation before it is
  demoted. It must cover the jitter with which requests arrive. A large value
  suits bursty priority threads, but a priority thread spending a large credit
  can hold the bandwidth threads off for that long.
* `neg_limit` is how long over-use is remembered. A thread that used idle
  cycles beyond its allocation stays demoted until it has earned its count back
  to zero, so a deep negative limit means a long gap in its service once the
  others return.

Timing: `demote` comes from the counter register, so it reflects service up to
the previous cycle. A thread at count 0 that is served once (with no credit tick
in the same cycle) is demoted from the next cycle on.

## Staging buffers

Between the two arbitration points, the link carries at most one request per
cycle, tagged with its thread. `staging_buffer` writes it into a FIFO of that
thread (depth 4 by default) and tells the first point per thread whether there
is room. A thread that the second point holds back (for example a demoted
thread) fills only its own FIFO; the other thread keeps flowing over the link.

## Target and responses

`mem_target` is a 4096-word by 64-bit SRAM. It is always ready and answers
every request one cycle after accepting it: read data for a read, an
acknowledge for a write, tagged with initiator and thread. `resp_net` steers
each response to the initiator it names. With one target there is no
contention between responses, and initiators always accept them, so this path
has no arbitration and no ready signal.

A request that meets no competition and whose thread is not demoted is accepted
in the cycle it is presented and answered one cycle later.

## Interface of `qos_noc_top`

| port | width | meaning |
|------|-------|---------|
| `clk`, `rst_n` | 1 | clock; active-low reset, asynchronous assert |
| `init_thread[i]` | 4 x 2 | thread of initiator i |
| `epoch_size[i]` | 4 x EW | requests per epoch of initiator i (0 acts as 1) |
| `thread_level[t]` | 4 x `qos_level_e` | `QOS_PRIORITY`, `QOS_BANDWIDTH` or `QOS_BEST_EFFORT` |
| `alloc_num[t]`, `alloc_den[t]` | 4 x RW each | allocation as a fraction of target cycles; `den = 0` gives no credit |
| `pos_limit[t]`, `neg_limit[t]` | 4 x CW, signed | credit saturation limits |
| `ini_valid[i]`, `ini_req[i]`, `ini_ready[i]` | 4 x (1, `req_t`, 1) | request ports; `init`, `thread` and `marker` of `req_t` are filled in by the network |
| `rsp_valid[i]`, `rsp[i]` | 4 x (1, `rsp_t`) | response ports, no backpressure |
| `demote`, `credit` | 4, 4 x CW | observation of the edge |
| `p1_epoch_adv`, `p2_epoch_adv` | 1 each | observation: the grant of this cycle ended a round |

The request and response types and the QoS level enum are in `qos_pkg`.
Configuration inputs are meant to be held static while traffic flows.

Parameters (defaults): `EW = 8` (epoch counter width), `CW = 8` (credit count
width), `RW = 8` (allocation fraction width), `STG_DEPTH = 4` (staging FIFO
depth), `MEM_DEPTH = 4096` (target words). None of these sizes comes from the
original description of the scheme; they are choices of this implementation.

## Behaviour on the system workload

`tb/tb_qos_noc_top.sv` drives the top, at its default parameters, with traffic
models of the four initiators (`tb/tb_traffic.sv`):

| initiator | traffic | rate |
|-----------|---------|------|
| CPU  | 4-word cache-line bursts, reads:writes 4:1, waits for its burst to complete, then computes for a random time (mean 35 cycles at the low miss rate, 4 at the high) | 800 MHz core, 1 instruction per clock when not stalled |
| MPEG | bursts of 1-8 words, reads:writes 2:1 | 800 MB/s (0.5 word/cycle) |
| VID  | 8-word reads, regular | 200 MB/s (0.125 word/cycle) |
| GEN  | bursts of 1-8 words, reads:writes 1:1 | 100 MB/s |

and the configuration CPU priority with 7/20 of the target, MPEG bandwidth with
1/2, VID bandwidth with 3/20, GEN best effort; epoch sizes CPU 4, MPEG 10,
VID 3, GEN 1; credit
limits +16/-8 for the CPU and +8/-8 for MPEG and VID. Over 20,000 target cycles
per run it measured the following. CPU MIPS is 800 times the fraction of
target cycles the CPU spends computing rather than waiting for a miss.

| run | MPEG | VID | GEN | CPU | CPU MIPS |
|-----|------|-----|-----|-----|----------|
| low miss rate  | 50.0% | 12.5% | 6.2% | 9.7%  | 683 |
| high miss rate | 50.0% | 12.5% | 2.5% | 35.0% | 279 |
| low miss rate, VID and GEN on one thread (allocated 1/5) | 50.0% | 12.5% | 6.2% | 9.4% | 688 |

(shares of target cycles). The published cycle-level model of the scheme, with
the same workload, reports 50 / 12.5 / 6.47 / 9.68% and 678 MIPS at the low miss
rate, and 49.2 / 12.4 / 3.1 / 35% and 280 MIPS at the high one. At the high
miss rate the CPU asks for about 44% of the target; it is held to its 35% and
the stream initiators keep their bandwidth, while at the low miss rate it is
served at once. These numbers depend on the random traffic models, the epoch
sizes and the limits chosen here, so close agreement is partly luck. They are
not a validation of the original figures.

The test also checks every response against a shadow copy of the memory, and
that a CPU request is never kept waiting while the CPU thread is not demoted.
It counts each mechanism and fails if one never happens: service of the CPU
past other waiting requests, demotion of the CPU and of a bandwidth thread,
round ends at both points, a full staging FIFO, best-effort service, and both
credit limits. A third short run has the CPU alone, missing all the time. It
uses the idle target far beyond its allocation, so its count sinks to the
negative limit. A fourth run repeats the low miss rate with VID and GEN sharing
one thread (allocated 1/5), so that their requests are merged by the epoch
rule at the first point.

## What follows the original scheme and what is chosen here

Taken from the scheme as published: the core/edge split; the three QoS levels
and their order; strict priority between levels; demotion to best effort while
a credit count is negative; per-thread credit counters with periodic increment,
decrement on service and user-set upper and lower saturation; epoch markers
inserted at the initiator boundary with independent epoch sizes; the epoch rule
at each arbitration point; least-recently-serviced tie-breaking; per-thread
buffering in the core; the demote sideband; the two-point topology with its
four initiators; the 8-byte, one-cycle SRAM target; and the allocations 1/2 for
MPEG, 240 MB/s (15%) for VID and the rest for the CPU.

Choices of this implementation, where the description is silent:

* The marker goes on the **first** request of an epoch.
* The final choice between threads is made by the last arbitration point, which
  sits directly in front of the edge block; the edge block itself only counts
  and demotes. The original places that final arbitration "at the edge".
* The epoch scheme between threads of the same level uses the regenerated
  per-thread markers (stage 2 above). The original only says that "a version"
  of the epoch scheme is used there.
* A count of exactly 0 does not demote. The original says both that a negative
  count demotes and that a demoted thread waits until its count is positive
  again; the first reading is used, and it matches the statement that a count
  of 0 means the thread got exactly its allocation.
* The allocation is a fraction `num/den` realised with an accumulator.
* Counter, fraction and epoch widths, FIFO depth and SRAM size.
* The valid/ready handshakes, with no pipeline register anywhere on the
  request path, so that the one-cycle service latency holds.
* A write is acknowledged with a response.
* The epoch sizes and credit limits of the system test.

## Not included

* The initiators themselves; they exist only as traffic models in `tb/`.
* An initiator that sends on several threads. Each initiator port here has
  exactly one thread, although several ports may share one.
* Routing to more than one target (address decoding, an arbitration point per
  target) and a response network with arbitration between targets.
* Clock-domain crossings and data-width converters. The epoch scheme is meant
  to pass through them unchanged, since it only relies on markers; none is
  built here.
* The fixed-priority and TDMA arbiters that the scheme was compared against.

## Files

| file | content |
|------|---------|
| `rtl/qos_pkg.sv` | request/response structs, QoS level enum, widths |
| `rtl/epoch_marker.sv` | initiator boundary: stamps initiator and thread, sets epoch markers |
| `rtl/lrs_arbiter.sv` | least-recently-serviced (matrix) arbiter |
| `rtl/qos_arb_point.sv` | core arbitration point: levels, demotion, two-stage epoch rule |
| `rtl/req_fifo.sv` | small request FIFO |
| `rtl/staging_buffer.sv` | per-thread FIFOs on the link between two points |
| `rtl/alloc_tick.sv` | periodic credit event at a fractional rate |
| `rtl/credit_counter.sv` | saturating signed credit counter |
| `rtl/qos_edge.sv` | edge: per-thread counters and demote sideband |
| `rtl/mem_target.sv` | SRAM target, 1-cycle latency |
| `rtl/resp_net.sv` | response steering |
| `rtl/qos_noc_top.sv` | the whole system |
| `tb/tb_<module>.sv` | self-checking testbench of each module |
| `tb/tb_traffic.sv` | traffic model of one initiator (used by `tb_qos_noc_top`) |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/qos_pkg.sv tb/tb_qos_noc_top.sv --top-module tb_qos_noc_top -o sim
./obj_dir/sim
```

Replace `tb_qos_noc_top` with any other `tb_*` name to run a unit test. The
system test takes well under a second. To try another configuration, edit the
`epoch_size`, `thread_level`, `alloc_*` and `*_limit` assignments at the start
of its `initial` block. The lint warnings left are about the reset used both in
flops and in assertion `disable iff` clauses, package constants that a given
module does not use, and the marker bit that the target ignores.
