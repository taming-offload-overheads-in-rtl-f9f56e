# Cutting the cost of handing work to a 288-core accelerator

A host processor that hands a job to a large accelerator pays a fixed price before
any useful work starts and after it ends. It has to tell every cluster what to run
and with which arguments, wake every cluster up, and learn when all of them are done.
On a many-cluster chip, doing this with ordinary unicast stores and a software
barrier costs hundreds to thousands of cycles, and the cost grows with the number of
clusters. For short jobs it can swallow most of the speed-up that offloading was
supposed to bring.

This RTL models an Occamy-style system: one host, and 32 clusters of 9 cores each in
8 quadrants of 4. It adds two small hardware mechanisms that remove most of that
fixed price:

* **Multicast stores in the interconnect.** A single store from the host can be
  delivered to any power-of-two set of clusters at once. This covers the job
  descriptor writes and the wake-up interrupt.
* **A job completion unit in the CLINT.** The CLINT is the core-local interruptor,
  the block that holds the software-interrupt bits. The unit counts cluster
  arrivals and raises the host's software interrupt itself when the last one
  arrives. This replaces a software barrier on a shared counter.

The rest of the system is built around these two mechanisms: the two-level crossbar
networks, the clusters' banked scratchpad (TCDM), the DMA engines, the per-cluster
interrupt registers and barriers, and the on-chip memories. The instruction-executing
cores are not part of this RTL. Their memory and control ports are brought out, and
the testbenches drive them with small behavioural programs.

## System organisation

```
host ──► narrow top crossbar (64 b, multicast) ──► quadrant q (×8) ──► cluster c (×4)
            │  │  │  └─► narrow-to-wide bridge ──┐
            │  │  └────► 512 KB narrow SPM        │
            │  └───────► CLINT + job completion   ▼
            └──────────► peripheral port     wide top crossbar (512 b) ──► 1 MB wide SPM
                                                  ▲
                         quadrant wide ports ─────┘
```

Each quadrant has its own narrow (64-bit) and wide (512-bit) crossbar. Slave port 0
comes from the top level and master port `NRC` leads back up. Each cluster has:

* a 128 KB TCDM in 32 word-interleaved banks of 4 KB;
* nine core ports, where core 8 is the data-mover (DM) core;
* a DMA engine on the wide network, programmed by the DM core through a register port;
* an instruction-cache refill port on the wide network;
* an MCIP register (machine cluster interrupt pending) and a 9-core hardware barrier;
* its own narrow and wide crossbars.

### Address map

| Region | Base | Size |
|---|---|---|
| Cluster q.c | `0x1000_0000 + q·0x10_0000 + c·0x4_0000` | 256 KB |
| └ TCDM | cluster + `0x0` | 128 KB |
| └ MCIP set / clear | cluster + `0x3_0000` / `0x3_0008` | |
| CLINT | `0x0400_0000` | MSIP at 4·hart, `offload[j]` at `0x8000+8j`, `arrivals[j]` at `0x9000+8j`, cause at `0xA000` |
| Peripherals (outside) | `0x0200_0000` | 16 MB |
| Narrow SPM | `0x7000_0000` | 512 KB |
| Wide SPM | `0x8000_0000` | 1 MB, reachable from the narrow side through the bridge |

Only the 0x40000 spacing between clusters is given by the original design; the rest
of the map is this implementation's choice. With that spacing, address bits [19:18]
select the cluster within a quadrant and bits [22:20] select the quadrant.

### Bus protocol

Both networks use one simple protocol (`occamy_pkg::nreq_t` / `wreq_t`). A request is
a single beat carrying `write`, `addr`, `mask`, `wdata` and byte `strb`, with a
valid/ready handshake. A response (`rdata`, `err`) is valid-only: the receiver must
take it in the cycle it is shown. Every response returns to its slave port in request
order. There are no bursts. The DMA issues one 64-byte beat per request, and the
networks keep up to `MAX_OUT` of them in flight.

## Multicast addressing (`mcast_addr_decode`, `mcast_xbar`)

A request carries a `mask` next to its address. A 1 in the mask makes the matching
address bit a don't-care, so a request with *n* mask bits set names 2ⁿ addresses.
Each crossbar rule is written the same way. Its mask is the size minus one, so a
rule covers any naturally aligned power-of-two region. A request matches a rule when
every bit either agrees or is masked on either side:

```
match = &((req.mask | rule.mask) | ~(req.addr ^ rule.addr))
```

For example, address `0x1028_0000` with mask `0x0028_0000` names cluster 1 of
quadrant 2 with bits 19 and 21 masked. That is four clusters: clusters 1 and 3 of
quadrants 0 and 2. To wake every cluster, the host stores `0x1FF` to cluster 0.0's
MCIP-set address with mask `0x007C_0000`.

`mcast_xbar` is the crossbar that uses the decoder:

* **Input stage.** Each slave port has a 2-entry input FIFO and a registered response
  path. Master ports arbitrate round-robin.
* **Unicast.** A unicast request goes to the lowest matching rule. A slave port may
  have up to `MAX_OUT` unicast requests in flight to the same master port. A request
  to a different master waits until the port has nothing in flight. This keeps
  responses in order without reorder buffers.
* **Fork.** A write that matches several master ports is a multicast. It waits until
  its port is idle, then is handed to each matching master as soon as that master
  grants it. Copies can be accepted in different cycles.
* **Join.** The slave port gets one response when all copies have answered. Its
  `err` is the OR of the copies' errors. Copies that answer before the fork has
  finished are counted too. Reads with a mask are not forked: they take the lowest
  match.
* **Errors and the upward route.** A request that matches nothing gets an error
  response. `DEFAULT_EN`/`DEFAULT_PORT` send unmatched requests up the hierarchy.
  `NO_DEFAULT_SLV` stops requests that came down from going back up. This rules out
  routing loops between the levels.
* **Addresses are not rewritten.** Every copy carries the address of the first named
  cluster. Slaves therefore decode only their own offset bits, because all clusters
  share the same layout.

The quadrant crossbars reuse the same logic. A multicast that reaches a quadrant is
forked again over that quadrant's clusters. Inside a cluster it reaches exactly one
target: the TCDM or the peripheral page.

## Job completion unit (`job_completion_unit`, `clint`)

Each unit holds two counters, `offload` and `arrivals`, and works like this:

1. The host writes the number of clusters of the job to `offload`.
2. Each cluster's DM core stores any value to `arrivals` when it is done. The store
   increments the counter.
3. When `arrivals` equals `offload` (and is not zero), the unit fires: it sets the
   host's MSIP bit and clears `arrivals`.
4. If the host's MSIP is still pending, the unit waits and fires in the cycle after
   the host clears it.

An arrival in the cycle of a fire counts towards the next job.

The CLINT holds `NR_JOBS` such units (default 4), addressed by job ID. The ID of the
unit that fired goes into a cause register that the host reads. If several units
complete together, the lowest ID fires first; the others wait as above. From the
last arrival store reaching the CLINT to the host interrupt takes one cycle.

**Departure from the original.** The original logic diagram prints 5-bit `arrivals`
and `offload` counters. A 5-bit counter cannot hold 32, the full-chip cluster count
the design is evaluated at. The counters here are therefore `CNT_W = 6` bits wide.

## Clusters (`snitch_cluster`)

The parts of a cluster, with the choices made here:

* **Core steering.** A core request whose address falls into the cluster's own
  128 KB goes straight to a TCDM bank port and is answered in the next cycle. Other
  requests go through the cluster's narrow crossbar. From there they reach the
  peripheral page or leave the cluster. Each core has one request outstanding.
* **TCDM (`tcdm`).** Address bits [7:3] pick the bank and [16:8] the row. Each bank
  arbitrates round-robin among the core ports and the port coming from the crossbar.
  The wide port (DMA, and accesses from other clusters' DMAs) covers eight adjacent
  banks and wins over the cores on those banks. It therefore always completes in one
  cycle, and a 64-byte beat moves per cycle.
* **DMA (`cluster_dma`).** Registers are SRC `0x100`, DST `0x108`, LEN `0x110`,
  START `0x118` (a write launches; a read returns busy) and STATUS `0x120` (completed
  transfers). A two-entry descriptor queue lets the DM core launch the next copy
  while one is running. Reads are pipelined up to `BUF_DEPTH` beats ahead of writes.
  In steady state one beat is moved per cycle, as the original runtime model
  assumes. Transfers are one-dimensional and 64-byte aligned.
* **MCIP (`cluster_periph`).** There is one bit per core. A store to the set or clear
  address sets or clears the written bits, so a multicast store can set them in many
  clusters at once. Each core also clears its own bit locally in one cycle, without
  a bus access.
* **Barrier (`cluster_barrier`).** Cores pulse `arrive`. In the cycle the last
  participant arrives, every core sees a one-cycle `release`.

## The offload sequence, as exercised end to end

`tb_occamy_top` runs the whole system at full size: 8 × 4 clusters and 288 core
ports. It performs an AXPY with N = 1024, 32 elements per cluster. Integer arithmetic
stands in for the floating-point units. The sequence:

1. The host sets `offload[0] = 32`.
2. The host writes the job arguments into every TCDM with seven multicast stores.
3. The host wakes all clusters with one multicast MCIP store.
4. In each cluster, every core clears its MCIP bit.
5. The DM core queues two DMA reads of its slices of x and y from the wide SPM. All
   32 clusters contend for the wide SPM at this point.
6. The cores meet at the barrier, compute, and meet at the barrier again.
7. The DM core writes z back and stores to `arrivals[0]`.
8. The interrupt reaches the host, which checks the cause, clears MSIP and reads
   results through the bridge.

At the RTL level, the host's part takes 68 cycles. From the wake-up store to the
interrupt takes 441 cycles, including the data movement and the behavioural compute.
These numbers depend on the behavioural core programs and are not directly
comparable with measurements on a full chip.

A second phase runs two one-cluster jobs (IDs 1 and 2) that finish together, while
the host leaves MSIP pending. The second unit fires only after the clear. The
testbench counts every mechanism and fails if any of them never happened: multicast,
wake-up, job interrupts, delayed fire, DMA queueing, TCDM bank conflicts, wide
contention, barriers, bridge, narrow SPM and peripheral port.

## What is not here, and other departures

* **Cores, FPUs, instruction caches and the host CPU.** These are existing designs
  that the system uses but does not define. They appear as ports.
* **CLINT timer.** The CLINT has no machine timer, only MSIP and the job units.
* **Simplified interconnect.** The networks use the simple single-beat protocol above
  instead of a full AXI implementation: no bursts, IDs or atomics. Ordering is
  enforced by stalling target changes rather than by ID tables, and read multicast
  is not supported. The area and frequency figures reported for the original
  multicast crossbar are not reproduced.
* **DMA.** The DMA has no 2-D mode and no unaligned transfers.
* **Job completion counters.** They are 6 bits wide instead of the 5 bits drawn in
  the original diagram (see above).
* **Cycle counts.** The latencies measured on the original chip are not matched
  cycle for cycle: wake-up and interrupt latencies of tens of cycles, and
  DMA set-up times. The only rate checked is the DMA's one beat per cycle.

## Simulating

Each block has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=… failures=…` and has a watchdog. `tb_nmem` is a behavioural
narrow memory used by several of them. With Verilator 5:

```
verilator --binary --timing -Wno-fatal --top-module tb_occamy_top \
  -y rtl -y tb +libext+.sv rtl/occamy_pkg.sv tb/tb_occamy_top.sv
./obj_dir/Vtb_occamy_top
```

Building and running the full-size system testbench takes about five minutes. The
quadrant and cluster testbenches exercise the same paths at one quadrant and at one
cluster. Parameter defaults are the full-size numbers: 8 quadrants, 4 clusters,
9 cores, 32 banks of 512 words, a 512 KB narrow SPM and a 1 MB wide SPM.
