# SuperNIC data plane in SystemVerilog

A SuperNIC is a network card built on an FPGA. Several tenants share it to
offload their packet processing. Each tenant's processing is a *DAG of network
tasks* (NTs): firewall, NAT, load balancer, a key-value cache, a transport,
and so on. The central idea is **not to schedule NTs one by one**. NTs are
grouped into *chains*, one chain per reconfigurable region of the FPGA. The
scheduler hands a packet header to a whole chain at once and sees it again
only when the chain is finished. That keeps the crossbar small (one port per
region, not per NT) and keeps the scheduler out of the per-NT critical path.

Three mechanisms make chains flexible enough to share:

- **Skipping.** A packet may run any subset of a chain's NTs, so several
  DAGs can share one loaded chain.
- **Credits reserved for the whole chain.** Flow control is per NT, but a
  packet is sent only after it holds a credit on every NT it will run. If
  that is not possible, it holds credits for a prefix of the chain and comes
  back early.
- **Two kinds of parallelism.**
  - DAG parallelism: one packet's header is copied to parallel chains and
    joined afterwards.
  - Instance parallelism: several regions load the same chain, and packets
    are spread over them round-robin.

This repository holds synthesizable RTL for that data plane and a
self-checking testbench for every module. It was built from the published
description of the SuperNIC. Where the description is silent, the choices
below are this design's own.

## The path of a packet

```
 MAC ─► parser_mat ──payload──► packet_store ◄──read/free── egress ─► MAC
          │   │  └─(rate_limiter: admit?)                      ▲  ▲  ▲
          │   └──── no NT needed (bypass) ─────────────────────┘  │  │
          └──── control packet ─► SoftCore ports ─────────────────┘  │
          │ descriptor                                               │
          ▼                                                          │
   central_scheduler ── done ────────────────────────────────────────┘
   (DAG table, credit_store, sync_buffer, header store, load monitor)
          │  ▲
          ▼  │ region_xbar (one port per region, round-robin returns)
   nt_region 0 … nt_region 7
   (input FIFO ► nt_wrapper ► nt_wrapper ► … up to 7 NTs)
```

1. **Parsing and admission.** `parser_mat` reads the first 64-byte beat of a
   packet into a *descriptor* (`desc_t` in `snic_pkg`). The descriptor holds
   the packet-store slot, DAG UID, user, length, addresses and ports, and a
   few application fields (opcode, key, value, sequence number). The UID is
   looked up in the Match-and-Action Table, which gives the route and the
   owning user.
   - Packets bound for NT processing must pass their user's token bucket in
     `rate_limiter`. That bucket is the only place fairness is enforced:
     every other resource a user consumes scales with its ingress rate.
   - A refused packet never touches the packet store.
2. **Payload and header split.** Admitted beats go into a 2 KB slot of
   `packet_store`. From then on only the descriptor moves. Its slot number is
   also its tag.
3. **Scheduling.** `central_scheduler` looks up the UID's DAG, a list of up to
   4 *stages*. A stage has up to 4 parallel *branches*. A branch names a
   *chain class* (a chain layout, loaded in one or more regions) and a 7-bit
   run mask (0 = skip that NT). For each stage the scheduler:
   - copies the header once per branch and opens a join in `sync_buffer` if
     there is more than one branch;
   - picks the next region of the class round-robin;
   - asks `credit_store` for credits;
   - sends the copy through `region_xbar`.
4. **Chains.** Inside `nt_region`, each position is an `nt_wrapper` around
   one NT. The wrapper reads its bit of the message's `run` and `rsv` masks:
   - skip: the message bypasses the NT;
   - execute: the NT had a credit reserved for this packet;
   - leave early: the NT must run but holds no reserved credit. The header
     goes back to the scheduler, which retries from that NT.

   When an NT finishes a packet, the wrapper returns the credit and counts
   the packet in the NT's load counter.
5. **Join and next stage.** A returning header of a parallel stage waits in
   the sync buffer until all its branches are back. The merged header then
   starts the next stage. When the last stage is done, or an NT dropped the
   packet, the header goes to egress.
6. **Egress.** `egress` merges three sources round-robin: finished DAGs,
   bypass packets and SoftCore packets.
   - It reads the payload back and writes the descriptor's fields into the
     first beat, so NT rewrites (NAT, load balancer, cache replies, NACKs)
     reach the wire.
   - A `reply` descriptor swaps addresses and ports to return the packet to
     its sender.
   - The slot is freed on the last beat. Dropped packets only free their
     slot.

## Credits: whole chain first, prefix otherwise

This part is the hardest to get right, so here it is in full.

- `credit_store` keeps an 8-bit counter per NT slot: 8 regions × 7
  positions = 56 counters, each starting at 8.
- For a header bound to region *r* with run mask *m*, it looks at the
  counters of the NTs in *m* only. Skipped NTs need no credit.
  - If all of them are non-zero, every one is decremented and the message
    carries `rsv = m`. The chain then runs without the scheduler.
  - If not, credits are taken from the front of the chain up to the first
    needed NT whose counter is zero. `rsv` is that prefix, and the wrapper of
    that NT sends the header back.
  - If even the first needed NT has no credit, nothing is sent. The header
    is *parked* in the header store (1024 entries) and retried later.
- A credit comes back when the NT hands a finished packet on, through the
  wrapper's `credit_ret` pulse. It does not come back when the packet leaves
  the region.
- A `T_CREDIT` write overwrites a counter, for example when a region is
  relaunched. The full-size testbench writes 1 into one NT's counter before
  any traffic. That NT then has a single credit, which forces early returns.

Priorities in the scheduler:

- Returns from regions go first, because they free credits and join state.
- New packets and parked ones then take turns.
- A parallel stage of N branches issues its copies on N consecutive cycles.

One header decision is made per cycle. A new header reaches its region's port
one cycle after the scheduler accepts it. The SuperNIC paper reports a fixed
16-cycle scheduler delay, and the unit testbench checks against that bound.

## Context switching and the load monitor

- The SoftCore stops a region by raising `region_stop[r]`. The region then
  takes no more headers out of its FIFO, but headers already in the chain
  finish.
- The scheduler stops sending to a stopped region. Copies for it are parked
  and counted in `stats.pause_hold`. They are sent once the stop is lifted.
- `region_idle[r]` tells the control plane when the region has drained and
  may be reconfigured.
- Each wrapper counts executed packets (`nt_load`).
- The scheduler counts the load each user *intends* to place on each chain
  class (`mon_*`), before any credit check, so throttled demand is still
  visible to the fairness policy.

## Virtual memory for NTs

`vmem` gives each of the 56 NT slots its own 1 GB virtual space:

- The space is split into 2 MB pages over 10 GB of on-board memory, which is
  5120 physical pages.
- The page table is flat: 512 entries of {valid, writable, PPN} per space,
  i.e. 4 KB per space.
- Translation and the permission check take one cycle.
- The first touch of an unmapped page takes a page from a free list and maps
  it read-write.

Faults are raised for:

- addresses beyond 1 GB;
- writes to read-only pages;
- allocations beyond a per-space quota;
- allocations when memory is exhausted.

The quota and unmap features are this design's additions, so that the control
plane can bound and reclaim memory. After reset, a sweep of 56×512 cycles
clears the table, and `vm_ready` is low until it finishes. The physical
request (`mem_*`) is meant for a DDR controller outside this design.

## The network tasks provided

The NTs work on the descriptor (header fields and the application shim), not
on the payload.

| Module | What it does |
|---|---|
| `dummy_nt` | Fixed latency (`LATENCY`, default 10; 50 is the other evaluated value), fully pipelined. This is the NT used for the chain, parallelism and fairness experiments. |
| `nt_firewall` | 8 deny rules of {source prefix, destination port}. Port 0 matches any port. A match sets `drop`. |
| `nt_nat` | 8-entry static translation. It rewrites the source on the way out and the destination on the way back. |
| `nt_lb` | Hashes the flow onto one of 4 backends and rewrites the destination. |
| `nt_kvcache` | 16-entry cache with FIFO replacement. SETs and GET responses fill it. A GET hit is answered directly (`reply`, `OP_GET_RESP`). |
| `nt_gbn` | Go-back-N receiver with 8 flows. In-order packets pass. Out-of-order ones are dropped and answered with a NACK carrying the expected sequence number. |

The default board (`default_kinds()` in `snic_pkg`) loads:

- region 0 with NAT-FW-KV-FW-LB and two dummies (a dummy stands where the
  evaluated chain has an AES NT);
- region 1 with GBN-KV;
- regions 2 to 7 with dummy NTs.

## Configuration

All tables are written by the control-plane SoftCores through one write bus,
`cfg` (`cfg_wr_t`: target, 16-bit address, 64-bit data).

| Target | Address | Data |
|---|---|---|
| `T_MAT` | entry | {valid[63], route[49:48], user[42:40], uid[15:0]} |
| `T_RL` | user | {enable, burst bytes, rate in bytes/cycle × 256} |
| `T_CREDIT` | NT slot | credit limit |
| `T_DAGLEN` | uid | number of stages |
| `T_STAGE` | uid×4+stage | `stage_t` |
| `T_CLASS` | class | mask of the regions holding that chain |
| `T_NT` | {NT slot, entry} | table of a firewall, NAT or LB NT |
| `T_VM_PTE`, `T_VM_QUOTA`, `T_VM_UNMAP` | | page table management |
| `T_MON_CLR` | | clears the load monitor |

The per-module header comments give the bit layouts.

## Sizes and timing

| Item | Value | Origin |
|---|---|---|
| clock | 250 MHz | paper |
| datapath | 512 bits = 128 Gb/s | this design (100 Gb/s needs ≥ 400 bits) |
| regions × chain length | 8 × 7 | 7 from the paper's longest chain; 8 regions this design's |
| credits per NT | 8 | largest value the paper evaluates (1/2/4/8) |
| packet store | 445 slots × 2 KB | from the paper's 198 BRAM36 figure |
| DAGs | 64 UIDs, 4 stages, 4 branches, 16 classes | this design |
| users | 8 | this design |
| vmem | 1 GB/space, 2 MB pages, 10 GB | paper |

The paper reports 196 ns of added latency, which is 49 cycles. The full-size
testbench measures:

- 4 cycles from the last received beat to the first sent beat for a packet
  with no NT;
- 23 cycles for a DAG of one 10-cycle NT.

It also checks that minimum-size packets arriving every other cycle on the
no-NT path are all delivered.

## Where this design departs from the paper

- **Not built:**
  - the PHY/MAC;
  - the SoftCores and all their software (DRF/DRFQ fairness computation,
    auto-scaling, launching and victim-cache policy, partial
    reconfiguration);
  - the DDR controller;
  - an AES NT.

  Their connections are top-level ports: MAC streams, `cfg`, SoftCore packet
  ports, region stop/idle, load counters and memory requests.
- **Fixed NT kinds.** Which NT sits at which position is a parameter
  (`KINDS`), because regions cannot be reprogrammed here.
- **Header-only NTs.** They see only the descriptor. The KV cache holds
  32-bit values in the header shim, not YCSB's 1 KB values.
- **Go-back-N receiver only.** The sender side of go-back-N is not built.
- **Own formats.** The header layout (Ethernet/IPv4/UDP followed by a shim
  with UID, opcode, key, value and sequence number) and all table formats are
  this design's own.
- **Simple merge at a join.** Drop and reply flags are ORed across branches.
  Header fields are taken from the branches in order.
- **Faster scheduler.** It answers in one cycle, not 16.

## Files, simulation and tests

- `rtl/snic_pkg.sv` holds every shared type and size.
- `rtl/snic_top.sv` is the top. `sync_fifo` and `rr_arb` are small helpers.
- Each module `X` has a testbench `tb/tb_X.sv`. Each testbench:
  - drives random traffic with `$urandom`;
  - compares against a reference model written in the testbench;
  - has a watchdog;
  - ends with a `TB_RESULT checks=… failures=…` line.

To simulate with Verilator 5, for example:

```
verilator --binary --timing -Wno-fatal -Irtl --top-module tb_snic_top \
    rtl/snic_pkg.sv tb/tb_snic_top.sv -o sim && obj_dir/sim
```

`tb_snic_top` runs the whole design at its default parameters.

- **Setup.** It configures six DAGs:
  - the VPC chain with skipped NTs;
  - GBN followed by the KV cache;
  - a two-branch parallel stage over two instance pairs, followed by a
    skipping stage;
  - the bypass;
  - the SoftCore path;
  - a rate-limited user.
- **Traffic.** It sends about 3400 packets and pauses one region for a
  while.
- **Result checks.** It checks every packet that comes out: payload, length,
  rewritten fields, firewall drops, NAT, LB, KV replies and NACKs.
- **Mechanism checks.** It fails if any of these never happened:
  - full or prefix credit reservation;
  - early return;
  - fork and join;
  - parking;
  - region pause;
  - each NT kind;
  - the SoftCore path.
