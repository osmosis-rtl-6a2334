# OSMOSIS data plane in SystemVerilog

An on-path SmartNIC runs small tenant programs ("kernels") on a pool of
processing units (PUs) for every packet that arrives. When several tenants
share the card, three resources are contended: PU time, host DMA bandwidth
and egress bandwidth. A tenant whose kernel takes twice as long per packet
ends up with twice the PUs under round-robin queue scheduling, and a tenant
that issues 4 KiB DMA transfers makes a 64-byte transfer of another tenant
wait behind it. OSMOSIS is a management layer that fixes this in hardware:

* every tenant flow gets its own **flow management queue (FMQ)**, a FIFO of
  packet descriptors plus the flow's execution context (ECTX): matching
  rule, kernel pointer and service-level knobs (priorities, cycle limit,
  buffer and memory sizes);
* a **WLBVT** scheduler (weight-limited borrowed virtual time) hands free
  PUs to FMQs so that, over time, each active flow holds a number of PUs
  proportional to its priority, regardless of how long its kernels run;
* the DMA and egress engines **cut transfers into fragments** and
  interleave the flows by **weighted round robin** on their IO priority, so
  that a large transfer no longer blocks a small one;
* kernels **run to completion**, but a per-flow cycle limit kills a runaway
  kernel; memory accesses are relocated and bounds-checked per flow, DMA
  addresses go through an IOMMU, and every violation is reported to the
  tenant as an entry in its **event queue**, written to host memory with
  priority over all tenant DMA.

This repository contains that data plane as synthesizable SystemVerilog
(`rtl/`) and self-checking testbenches (`tb/`). The PUs, their L1/L2
memories, the Ethernet MAC/inbound engine, the AXI/PCIe DMA backend and the
egress MAC belong to the underlying SmartNIC (the design follows the PsPIN
RISC-V SmartNIC) and are outside; their signals are ports of the top module.

## Packet path through `osmosis_top`

```
 pkt_hdr ──► match_engine ──hit──► fmq_array ──nonempty/occ──► wlbvt_sched
                │ miss                  ▲  deq                    │ grant
                ▼                       └──────── pu_dispatch ◄───┘
            host_* (normal NIC path)              │ task_* / pu_done / pu_kill
                                                  ▼
                                 PUs (outside) ── pu_acc_* ──► mem_guard ×N_PU
                                    │ dma_req                │ egr_req
                                    ▼                        ▼
                          io_frag_sched (DMA)        io_frag_sched (egress)
                            ▲ hi (events)  │                 │
                         eq_writer       iommu ──fault──┐    ▼
                            ▲              │            │  egr_frag_*
           timeouts, memory faults,        ▼            │
           IOMMU faults ───────────────  dma_frag_*     │
                            ◄───────────────────────────┘
```

1. **Matching** (`match_engine`). The parsed header is compared with the
   rule of every FMQ in parallel. A UDP rule compares protocol, destination
   IP and destination port; a TCP rule also compares source IP and source
   port. Addresses are 128 bits wide (IPv6; IPv4 as mapped addresses). The
   lowest-numbered matching FMQ wins. Unmatched packets leave on `host_*`.
2. **Queueing** (`fmq_array`). One FIFO of descriptors (32-bit pointer into
   the packet buffer, 16-bit length) per FMQ, all in one memory. An FMQ is
   full when its FIFO is full or when the packet bytes it holds would pass
   its packet-buffer size. A full FMQ back-pressures the ingress (lossless
   fabric: nothing is dropped).
3. **PU scheduling** (`wlbvt_sched`, `wlbvt_div`). Described below.
4. **Dispatch** (`pu_dispatch`). On a grant, the head descriptor of the
   granted FMQ is popped and, one cycle later, a task is issued to the
   lowest-numbered free PU. The dispatcher remembers which FMQ every PU
   serves; from that it derives each FMQ's current PU occupation for the
   scheduler. Each PU has a cycle counter. When a kernel is still running
   after its FMQ's cycle limit, `pu_kill` is raised and a timeout event is
   produced.
5. **Kernel memory** (`mem_guard`, one per PU). A kernel addresses its L1
   and L2 segments from offset 0. The guard adds the segment base
   (relocation) and checks that the access ends inside the segment
   (protection), combinationally. A violation raises `pu_acc_fault` and an
   event.
6. **Kernel IO** (`io_frag_sched` twice, `iommu`). Kernels post DMA and
   egress requests (PU, local address, host address, length). The top
   fills in the issuing FMQ and its DMA or egress priority.
7. **Events** (`eq_writer`). Timeouts, memory faults and IOMMU faults are
   turned into 8-byte records written into the event ring of the affected
   ECTX in host memory.

Configuration is a simple register write port (`cfg_*`): `cfg_sel=0`
addresses the ECTX registers of FMQ `cfg_idx` (register map in
`osmosis_pkg::ectx_reg_e`), `cfg_sel=1` addresses IOMMU entry `cfg_idx`.

## The WLBVT scheduler

Per FMQ the scheduler keeps two 64-bit counters that advance every cycle
while the flow is active (descriptors queued or kernels running):
`bvt += 1` and `total_occ += occ`, where `occ` is the number of PUs the
flow holds. `total_occ / bvt` is the average number of PUs the flow has
held, its throughput in PUs. Divided by the flow's 16-bit priority it is
the ranking key: the flow that has so far received least, relative to its
priority, goes first. Flows that were idle do not lose their history, so
a flow that used little in the past is favoured when it comes back.

The key alone would let a flow take all PUs for a while. The **weight
limit** prevents that: a flow is eligible only while it holds fewer PUs than
`ceil(N_PU * prio / S)`, where `S` is the sum of the priorities of all flows
with queued packets. Because the occupation is an integer,
`occ < ceil(N_PU*prio/S)` is the same as `occ*S < N_PU*prio`, so the limit
costs two multipliers per flow and no divider. The scheduler is
work-conserving: if only one flow has packets, `S` equals its priority and
it may use every PU.

Hardware organisation:

| stage | work |
|------|------|
| 1 | sample FIFO state, occupations, priorities, keys; sum `S` |
| 2 | eligibility per FMQ (weight limit) |
| 3 | minimum key within groups of 16 FMQs |
| 4 | minimum over the group winners |
| 5 | result register; re-checked against live state before it is used |

A state change reaches the grant it causes after **5 cycles**, and a new
decision enters the pipeline every cycle. Because decisions are based on
state that is a few cycles old, the result of stage 5 is checked again
combinationally (FIFO still non-empty, still under the limit, a PU free);
a stale decision is dropped, never wrongly executed.

The key `total_occ * 2^16 / (bvt * prio)` is produced by one bit-serial
restoring divider per FMQ (`wlbvt_div`), refreshed every 23 cycles at the
default sizes. The key only needs to follow averages that move slowly, so
a lag of a few tens of cycles does not change the schedule measurably,
while 128 single-cycle 64-bit dividers would dominate the area.

## Fragmentation and weighted round robin

`io_frag_sched` holds up to `N_STREAMS` (32) transfers at once. Each
transfer is cut into fragments of at most `FRAG_BYTES` (512 by default; 64
is the other size studied) that never cross a `FRAG_BYTES`-aligned host
address, so no fragment crosses a 4 KiB page. The stream whose turn it is
may send as many fragments in a row as its weight (the FMQ's DMA or egress
priority), then the turn passes to the next stream with work. Many
fragments can be in flight; the backend acknowledges each one, and a
transfer completes (`cmpl_*`) when all its bytes were issued and
acknowledged. A small transfer therefore waits at most one WRR round, not
behind the whole of a large one.

The DMA instance has a second input with strict priority: event-queue
writes. They carry immediate data, are marked physical (they bypass the
IOMMU translation) and their acknowledgements are ignored.

Every data fragment of the DMA engine passes the `iommu`: its host virtual
page is looked up in a fully associative table of entries (FMQ, virtual
page, physical page, read/write permission). A hit replaces the page
number; a miss or a missing permission drops the fragment, aborts the rest
of its transfer (which completes with `cmpl_err`), and produces an IOMMU
event.

## Event queue records

Each ECTX has a ring of `2^eq_size_log2` 8-byte entries at `eq_base` in
host memory. `eq_writer` keeps a producer index per FMQ (visible on
`eq_prod`) and writes each event to `eq_base + (index mod ring size) * 8`.
The record is `{code[2:0], pu[4:0], fmq[6:0], info[31:0]}` in the low 48
bits (`osmosis_pkg::event_t`); codes are 1 timeout, 2 memory fault, 3
IOMMU fault. Every source (each watchdog, each memory guard, the IOMMU) has
a one-entry buffer; an event arriving while its source's buffer is still
full is counted in `eq_lost`.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N_FMQ` | 128 | flows / tenants (FMQ index 7 bits) |
| `N_PU` | 32 | processing units (4 clusters of 8) |
| `FMQ_DEPTH` | 64 | descriptors per FMQ FIFO |
| `N_STREAMS` | 32 | transfers held per IO engine |
| `FRAG_BYTES` | 512 | fragment size, power of two |
| `N_IOMMU` | 64 | IOMMU table entries |

FMQ count, PU count, counter and priority widths, 5-cycle decision
latency and fragment sizes are taken from the published design; FIFO depth,
stream count and IOMMU size are choices of this implementation.

## Where this implementation departs from the published design

* **Share formula.** The published scheduler pseudocode computes the share
  with the number of FMQs in the numerator, while its text and results
  describe dividing the PUs. The share here is `ceil(N_PU*prio/S)`.
* **Compute priority width.** A data-structure figure shows an 8-bit
  compute priority; the text describes a 16-bit register. 16 bits are used.
  DMA and egress priorities are 8 bits.
* **Key computation** by a serial divider per FMQ instead of every cycle.
* **IOMMU** is a programmed table of page entries, not a page-table walker.
* **Cycle limit** is per kernel execution only; the variant that limits the
  total cycles of a flow is not built.
* **Software fragmentation** (done by the kernel) is not hardware and not
  part of this design; only hardware fragmentation is.
* The IO engines take one request per cycle on a single port each; the
  per-cluster command queues of the base SmartNIC are outside.

## Verification

Each block has its own testbench in `tb/` with an independent reference
model; each prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_match_engine` | random headers and rules against a reference matcher; UDP vs TCP tuples, priority of the lowest index |
| `tb_ectx_regs` | every register field against a shadow copy |
| `tb_fmq_array` | per-FMQ FIFO order, full by depth and by byte limit |
| `tb_wlbvt_sched` | 5-cycle decision latency, counters and key, equal split of 8 PUs between a 2× and a 1× kernel, 3:1 split for priorities 3:1, work conservation |
| `tb_pu_dispatch` | task contents, PU choice, occupation, watchdog timing and events |
| `tb_io_frag_sched` | fragment sizes and alignment, 2:1 WRR share, priority input, small transfer not blocked by a large one, abort on drop |
| `tb_iommu` | translation, permissions, ownership, faults |
| `tb_mem_guard` | relocation and bounds at segment edges |
| `tb_eq_writer` | ring addresses, record contents, lost-event count |
| `tb_osmosis_top` | end to end at 8 FMQs / 8 PUs (see below) |
| `tb_osmosis_full` | the same scenario with every parameter at its default |

The end-to-end scenario (`tb/osmosis_env.sv`) runs four tenants plus
unmatched traffic: a compute Congestor and Victim (2:1 kernel lengths), an
IO tenant that DMA-writes 1 KiB to host memory and sends a packet per
kernel, and a misbehaving tenant whose kernel never ends, writes outside
its segment and DMAs to an unmapped page. It checks that every packet is
processed once, in order, by its own tenant; that Congestor and Victim get
comparable PU time while both are backlogged; that all transfers complete;
and that every error appears in the right event ring. It counts and
requires each mechanism: match hit and miss, FMQ back-pressure, weight
limit engaged, watchdog kill, memory fault, IOMMU fault, event write,
multi-fragment transfer, WRR interleaving and event priority bypass.

To simulate a testbench with Verilator (the package first):

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/osmosis_pkg.sv $(ls rtl/*.sv | grep -v osmosis_pkg) \
  tb/osmosis_env.sv tb/tb_osmosis_top.sv --top-module tb_osmosis_top -o sim
./obj_dir/sim
```

## Lint notes

Verilator reports, by design: unused bits of scheduler state brought out
for observation (`bvt`, `total_occ`, `key`), unused completion outputs of
the IO engines, and `rst_n` being used both as asynchronous reset and in
the `disable iff` of the handshake assertions.
