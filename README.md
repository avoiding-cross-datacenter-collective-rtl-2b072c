# Spillway: disaggregated buffering for cross-datacenter traffic

When LLM training spans several datacenters, some collectives cross a long-haul link with a
round trip of tens of milliseconds. At the destination they reach a leaf switch port that is
also serving the local collectives, such as an AllToAll on the lossless class. Local bursts
win that port by strict priority. The lossy cross-DC packets then overflow the switch buffer
and are tail-dropped. Each such drop costs a retransmission timeout that grows with the
long-haul delay, and that delay is far longer than the local burst itself.

Spillway avoids these drops. A packet that has already crossed the long-haul link is never
thrown away at the destination. When the leaf would tail-drop it, the switch wraps the packet
in GRE and sends it to a *spillway*: a small server or SmartNIC with a large DRAM buffer,
attached to the exit switch. The spillway holds the packet until the destination port has
gone quiet, then reinjects it. A spillway cannot see the congested port. It learns the port's
state from the deflections themselves: a packet sent back too early is deflected again and
returns to it.

This repository holds a cycle-level, synthesizable SystemVerilog model of that loop:

- the destination port with its three traffic classes;
- the deflect-on-drop hook;
- the spraying of deflected packets over four spillways, with a "sticky" return path;
- the spillway nodes with per-destination queues and a graduated drain;
- fast congestion notification (CNP) at the source exit switch.

The network links in between are direct connections. Packets are descriptors, not bytes.

## The loop at a glance

```
 remote (cross-DC, prio 1) ──► fast_cnp ──────────────┐         ┌──► cnp_valid/cnp_pkt (to senders)
                               (source exit switch)   │
 local (AllToAll, prio 3) ────────────────────────────┤
                                                      ▼
                                             egress_port (destination leaf)
                          ┌─ drained (prio 2) ──►  3 classes, strict priority ──► NIC
                          │                        tail drop ─► mirror
                          │                                      │
                  round-robin merge                      deflect_on_drop
                          ▲                        (GRE, anycast or sticky unicast)
                          │                                      │
              spillway_node x4 ◄──────── anycast_spray ◄─────────┘
      (rss_steer → pkt_pool + ptr_ring per queue → drain_ctrl per queue → arbiter)
```

The top module `spillway_system` is wired as above. Each module's file opens with a comment
that gives its interface and timing. This README explains how the pieces work together.

## Packets as descriptors

`spillway_pkg` defines `pkt_t`, a single value per packet. Its inner header holds:

- the source and destination IPv4 addresses;
- the IPv4 identification field;
- the switch priority;
- the two ECN bits;
- the RoCE opcode and destination QP;
- a sequence number and a length.

The sequence number and length stand in for the payload. An optional GRE outer header adds a
`gre` flag, outer addresses, and an outer priority and ECN. Every port moves one descriptor
per clock.

Two conversions tie the model to real units:

- **Time:** the clock is taken as 1 GHz, so the 30 µs quiet interval of the prototype is
  `QUIET_CYCLES = 30000`.
- **Size:** buffer sizes are counted in packets of 4 KB:
  - the 64 MB switch buffer is `BUF_PKTS = 16384`;
  - the ~20 MB of lossy build-up at which drops begin is `LOSSY_LIMIT = 5120`.

One descriptor per clock at 1 GHz is far above the 12 Mpps of a 400 Gbps stream of 4 KB
packets. Rate is therefore never the limit in this model; buffer occupancy and timing are.

Priorities:

| value | class | treatment at the destination port |
|---|---|---|
| 3 | lossless local collective | back-pressured (stands for PFC), never dropped |
| 2 | packets drained from a spillway | tail-dropped, hence re-deflected |
| 1 | lossy cross-DC traffic | tail-dropped, hence deflected |
| 4 | deflection class (outer header only) | ECN disabled |

## When to drain: the per-queue drain controller

This part decides whether the scheme works. A spillway that reinjects too early recreates
the congestion it was meant to absorb. Four spillways that reinject at the same moment are
an incast of their own. `drain_ctrl` runs once per spillway queue, and its states are:

| state | what the queue does | leaves when |
|---|---|---|
| `DR_IDLE` | nothing, queue empty | a packet arrives → `DR_QUIET` |
| `DR_QUIET` | waits `QUIET_CYCLES + jitter` clocks with no arrival | timer expires → `DR_PROBE`; deadline → `DR_PROBE` |
| `DR_PROBE` | sends exactly one packet, the head of the queue | granted → `DR_PROBE_WAIT` |
| `DR_PROBE_WAIT` | waits one more quiet interval | expires → `DR_HALF` |
| `DR_HALF` | sends `HALF_PKTS` packets, one every other clock | last one granted → `DR_HALF_WAIT` |
| `DR_HALF_WAIT` | waits one more quiet interval | expires → `DR_FULL` |
| `DR_FULL` | sends one packet per clock whenever granted | queue empty → `DR_IDLE` |

Two rules cut across every row:

- **Any arrival restarts the wait.** An arrival is a new deflection or a probe that came back.
  It returns the controller to `DR_QUIET` with a fresh interval.
- **An empty queue ends the drain.** It returns the controller to `DR_IDLE`.

The controller never needs to tell a returned probe from a new deflection. Both mean "the
port is still busy", and both are handled by resetting the wait.

Three mechanisms work alongside the states:

- **Jitter.** Each time the interval restarts, a 16-bit LFSR (taps 16, 14, 13, 11) adds
  0 … 2^`JITTER_W`−1 clocks to it. That is up to ~1 µs at the defaults. Every queue of
  every spillway has a different seed, so spillways that see the same silence do not probe
  together.
- **Deadline.** A steady trickle of arrivals could keep a queue in `DR_QUIET` for ever. To
  prevent that, a hold counter runs while the queue is non-empty and nothing leaves. When it
  reaches `DEADLINE_CYCLES` (ten quiet intervals by default), the controller probes even
  though arrivals have not paused. The probe then starts the normal sequence, so progress is
  guaranteed without giving up the graduated ramp.
- **Timing.** Take the last arrival at a spillway's receive port as clock 0. The queue's
  request rises `QUIET_CYCLES + jitter + 2` clocks later. The packet leaves the node one
  clock after that: one clock in the receive stage, one to update the timer, then the grant.
  The block testbenches check these counts exactly.

The paper calls the second step both a "half burst" and a "half-rate burst". The model
combines the two readings: a burst of limited length (`HALF_PKTS`) sent at half the rate.
The waits after the probe and after the half burst each last one quiet interval, so that a
deflected packet has time to come back. The paper gives no length for these waits.

## Where drained packets go if the port is still busy: sticky anycast

Deflection has to spread load evenly, yet each flow's feedback loop must stay with one
spillway. The model does this with two addresses per spillway.

- **First deflection: anycast.** `deflect_on_drop` builds the GRE header:
  - outer source is the switch;
  - outer priority is the deflection class;
  - outer ECN is not-ECT, so deflection never produces congestion marks;
  - outer destination is the shared anycast address.

  `anycast_spray` stands for the exit switch's per-packet spraying. It deals anycast packets
  to the spillways in round-robin order.
- **On drain: stamp the identifier.** `spillway_node` writes its own identifier
  (`SPILLWAY_ID`, 0 … NSP−1) into the IPv4 identification field. It also re-marks the packet
  to priority 2.
- **Deflected again: unicast.** If the destination is still busy, the drained packet is
  tail-dropped once more. `deflect_on_drop` recognises priority 2 with an identification
  below NSP, and addresses the GRE header to that spillway's unicast address
  (`SPILL_IP_BASE + id`). `anycast_spray` then delivers it to that node alone. The probe and
  every later burst of a flow therefore keep returning to the spillway that sent them.

An outer destination that matches no spillway is counted (`ev_route_unknown`). The receive
stage of a node also refuses packets that are not GRE or not addressed to it
(`ev_spill_reject`).

## Inside a spillway node

- **Receive (`rss_steer`).** Checks the outer header and strips it. It then hashes the
  original destination address with the Toeplitz RSS hash to pick one of `NQ = 4` queues:
  - the key is the first 64 bits of the common default key `6d5a56da 255b0ec2`;
  - the queue is the hash's low bits.

  One queue per destination means a destination that is still congested keeps resetting only
  its own queue's timer. The other destinations drain undisturbed.
- **Store (`pkt_pool` + `ptr_ring`).** The packet is written into one shared pool. A slot
  comes from a fresh-slot counter first, then from a free list. The slot pointer is pushed
  onto the queue's ring. When the pool is full the packet is lost and `ev_spill_drop` pulses.
  This is the failure that even load spreading is meant to prevent.
- **Drain.** Every queue has a `drain_ctrl`. A round-robin arbiter grants one requesting
  queue per clock. The head packet is read from the pool and its slot is freed. The packet
  then leaves with the GRE header removed, the identifier stamped and priority 2.

## The destination port

`egress_port` holds three FIFOs in one shared buffer of `BUF_PKTS` and serves them by
strict priority: lossless, then drained, then lossy. Admission works as follows:

- **Lossless:** refused only when the whole buffer is full. The refusal appears as a low
  `lossless_ready`, which a sender must respect like PFC. An assertion checks that a refused
  packet is held, not withdrawn.
- **Drained and lossy:** admitted only while the buffer holds fewer than `LOSSY_LIMIT`
  packets, checked in that order within a clock.
- **Anything refused:** mirrored to the drop port. This models a mirror session tied to the
  tail-drop event. A small `MIRROR_DEPTH` FIFO absorbs two drops in one clock, and a mirror
  overflow is counted (`ev_mirror_loss`).

## Fast CNP at the source exit switch

When a packet is deflected in the destination DC, its ECN mark never reaches the receiver,
so the sender never slows down. `fast_cnp` closes that loop at the source exit switch. A data
packet that arrives with ECN = CE is answered at once with a CNP (opcode 0x81):

- the addresses are swapped;
- the destination QP and sequence are kept;
- the priority is lossless.

The forwarded packet's mark is cleared to ECT(0), so the receiver does not send a second
notification. GRE packets, deflection-class packets and CNPs pass untouched. One clock of
latency, no per-flow state.

## Parameters

| parameter | default | meaning | origin |
|---|---|---|---|
| `NSP` | 4 | spillways per exit switch | paper |
| `NQ` | 4 | queues per spillway | paper (prototype) |
| `QUIET_CYCLES` | 30000 | τ_gap in clocks | paper's 30 µs, 1 GHz assumed |
| `JITTER_W` | 10 | jitter up to 1023 clocks | own choice |
| `HALF_PKTS` | 16 | length of the half-rate burst | own choice |
| `DEADLINE_CYCLES` | 300000 | deadline in clocks | own choice |
| `POOL_ENTRIES` | 4096 | packets per spillway | scaled down, see below |
| `BUF_PKTS` | 16384 | switch buffer, 64 MB / 4 KB | paper's 64 MB |
| `LOSSY_LIMIT` | 5120 | lossy build-up, 20 MB / 4 KB | paper's ~20 MB |
| `MIRROR_DEPTH` | 64 | mirror FIFO | own choice |
| `ANYCAST_IP`, `SPILL_IP_BASE`, `SWITCH_IP` | 10.255.0.1, 10.255.1.0, 10.255.2.1 | addresses | own choice |

## How far the model goes, and where it departs from the paper

The model covers the following, as the paper describes them:

- the mechanisms of the loop;
- the class structure and priorities;
- the 30 µs quiet interval with jitter;
- the probe, half-burst and full-burst ramp;
- per-destination queues over a shared pool;
- identifier stamping and unicast return;
- fast CNP with cleared marks;
- ECN disabled on the deflection class.

The departures, and everything left out, are listed below.

- **Buffer size of a spillway.** The paper provisions 16 GB of DRAM per spillway, about 4.2
  million 4 KB packets. The pool here holds 4096 descriptors per spillway, on chip. That is
  enough for the default end-to-end run, whose peak is about 3700 per spillway. It is not
  enough for the paper's workloads at full length. For example, 16 flows at 400 Gbps blocked
  for 5 ms need 4 GB, about a million packets. `POOL_ENTRIES` can be raised without changing
  the RTL. Synthesis and simulation memory grow with it.
- **No payload.** Only descriptors are stored. The DRAM, the DPU's cores and its NIC
  pipeline are not modelled as such.
- **Spraying.** The paper sprays over least-congested paths. Here spraying is plain round
  robin.
- **Time parameters the paper does not give.** Jitter range, half-burst length, the wait
  after the probe and after the half burst, and the deadline are this design's own values.
  So is the exact rule that starts the deadline counter.
- **No network in between.** There is no spine or DCI latency, and no congestion on the way
  to and from the spillways. A probe that is deflected again returns in a few clocks instead
  of one intra-DC round trip. The quiet interval is therefore much longer than it needs to be
  in these simulations. The relative order of events is unchanged.
- **The paper's alternatives are not built.** These are the anycast-only and hash-only
  spillway selection, and the baselines: drop with RTO, and in-switch deflection.
- **No end-host congestion control.** The DCQCN reaction to CNPs is not modelled. Senders in
  the testbenches are fixed-rate.
- **Mirror overflow.** A lossy packet that also finds the small mirror FIFO full is lost, as
  a real mirror session would lose it. The paper does not discuss this case. The default
  testbenches never hit it.

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares the module against a
model written independently in the testbench. It ends with a line
`TB_RESULT checks=N failures=M`, and a watchdog bounds the run.

| testbench | what it checks |
|---|---|
| `tb_ptr_ring` | random push and pop against a queue model, depth 6 (not a power of two), full and empty |
| `tb_pkt_pool` | allocation, exhaustion, free-list reuse, data integrity |
| `tb_drain_ctrl` | each state transition, probe and burst cycle counts, a bounce-back during the probe wait, jitter range and variation, deadline |
| `tb_rss_steer` | Toeplitz hash against a key-shifting reference, acceptance and rejection by address |
| `tb_deflect_on_drop` | GRE header, anycast versus sticky unicast, back-pressure |
| `tb_anycast_spray` | round-robin spreading, unicast delivery, unknown addresses |
| `tb_fast_cnp` | CNP fields, mark clearing, packets that must pass untouched |
| `tb_egress_port` | cycle-exact reference model of admission, priority, drop and mirror |
| `tb_spillway_node` | first transmission exactly `QUIET_CYCLES + 3` clocks after the last arrival, identifier and priority rewrite, isolation of two destinations in different queues, pool overflow, rejection |
| `tb_spillway_system` | whole loop at reduced sizes (short quiet interval, small buffers), with bounce-backs and the deadline forced to occur |
| `tb_spillway_full` | whole loop at default parameters: 40000-packet lossless burst against a 30000-packet cross-DC flow at half line rate |
| `tb_spillway_testbed` | whole loop at default parameters, after the hardware testbed: a cross-DC flow at full line rate, interrupted by three periodic lossless bursts |

The three system tests share their body (`spillway_tb_body.svh`). Every packet of the cross-DC
flow must reach the NIC exactly once, either directly or through a spillway. Every lossless
packet must arrive in order. Every CE-marked packet must produce one CNP.

The tests also count each mechanism, and fail when one of them never happened:

- tail drop;
- spraying;
- sticky re-deflection and unicast routing (reduced run);
- probe, half burst and full burst;
- deadline (reduced run);
- CNP.

Each run also prints the cross-DC flow's completion time against the ideal, which is the
time the port needs to carry every packet. Results:

- **`tb_spillway_full`:** deflects 14,882 packets. The flow completes after 145,834 clocks
  against an ideal of 70,000.
- **`tb_spillway_testbed`:** the flow alone fills the port, so every drained packet displaces
  a lossy one, which is deflected in turn. The loop still delivers all 150,000 packets. It
  completes after 227,924 clocks against an ideal of 159,000.

Most of the gap is the quiet interval and the two waits that follow the last burst. With no
network latency modelled, these waits are much longer than a bounce-back would need. Both
runs simulate in about a second.

## Simulating

Every testbench builds the same way with Verilator 5:

```
verilator --binary --timing --assert --top-module tb_spillway_full \
    -Irtl -Itb -y rtl -y tb rtl/spillway_pkg.sv tb/tb_spillway_full.sv \
    --Mdir obj_full -o sim
./obj_full/sim
```

Replace `tb_spillway_full` with any other testbench name. The system runs print a
`mechanisms:` line with the event counts. The sizes of a run are local parameters at the top
of each system testbench. The module parameters listed above are the knobs of the design.
