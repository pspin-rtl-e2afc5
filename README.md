# PsPIN in SystemVerilog: a packet-processing unit for sPIN handlers

PsPIN sits inside a network interface. It runs small user functions, called
*handlers*, on every packet the NIC receives. This follows the sPIN model, in
which each message has three handlers:

- a **header handler**, run once on the first packet;
- a **payload handler**, run on every packet;
- a **completion handler**, run once after the last packet has arrived and
  every payload handler has finished.

The hardware has three jobs:
- keep that ordering for thousands of packets in flight;
- spread the work over 32 small cores (4 clusters of 8 "HPUs");
- give the handlers fast local memory and a few commands: send a packet, DMA
  to the host, write 32 B directly into host memory.

This RTL implements the scheduling and data-movement machinery around the
cores in its full default size:

| Part | Size |
|---|---|
| Clusters | 4 |
| HPU slots per cluster | 8 |
| L1 per cluster | 1 MiB, 64 banks |
| L2 packet buffer | 4 MiB, 32 banks of 512 bit, 2 ports |
| L2 handler memory | 4 MiB, 64-bit banks |
| Program memory | 32 KiB, 64 bit wide |
| Wide interconnects | 512 bit |

The RISC-V cores themselves are not part of it. Each HPU slot exposes the
core's register bus, L1 port, clock enable, interrupt and memory-protection
settings, so a core (or, in the testbench, a behavioural model) is attached
from outside.

## The life of a packet

1. **Arrival.** The NIC inbound engine (external) writes the packet into the
   L2 packet buffer through the NHI interconnect. It then hands PsPIN a
   *handler execution request* (HER, type `her_t`). The HER holds:
   - the message id and an end-of-message flag;
   - the packet's L2 address and size;
   - how many bytes to copy into L1;
   - the *execution context* (`exec_ctx_t`): handler addresses and enables,
     the handler-memory and scratchpad regions, a host descriptor address,
     and two time-outs.
2. **Ordering (`mpq_engine`).** Each message owns a *message processing queue*
   (MPQ). HERs are kept in one shared 64-entry buffer, linked into a list per
   MPQ. Every cycle a round-robin arbiter picks one MPQ that can make
   progress and emits one task. An MPQ can make progress when:
   - its header handler is still to run and a packet is queued;
   - its header handler has finished and packets are queued;
   - the message has ended, nothing is queued or running, and the completion
     handler is due.

   While the header handler runs, the MPQ waits. The completion handler is
   released only after the end-of-message HER and after every payload task
   has reported back.
3. **Placement (`task_dispatcher`).** Each cluster has a *home* set of
   messages (message id mod 4). The dispatcher keeps one credit per free L1
   packet slot in each cluster.
   - A task goes to its home cluster if that cluster has a credit.
   - Otherwise it goes to the cluster with the most credits.
   - If no cluster has a credit, the dispatcher stalls the MPQ engine.
4. **Copy and start (`cluster_scheduler`, `cluster_dma`).** Inside the
   cluster, the task gets one of 32 1 KiB slots of the L1 packet area. The
   cluster DMA engine copies up to 1 KiB of the packet from L2 into the slot,
   64 B per cycle. When the copy of the task at the head of the FIFO is done,
   the task goes to an idle HPU in a single cycle.
5. **Run (`hpu_driver`).** The HPU's runtime loop, in order:
   1. Load the handler pointer from its driver. The load stalls, and the
      core's clock is gated, until a task is present.
   2. Read the arguments.
   3. Run the handler, which may issue commands.
   4. Write a doorbell.
6. **Commands (`cmd_unit`).** Commands travel from the driver through the
   cluster's command arbiter to the command unit. The unit routes them by
   type:
   - NIC commands to the external NIC outbound engine;
   - DMA commands to `offcluster_dma`, which reads L2 and writes host memory;
   - HostDirect commands to `host_direct`, which writes 32 B of immediate
     data to a host address.

   Responses return by the command id {cluster, HPU, slot}.
7. **Completion.** When the doorbell is written, the driver keeps the
   finished task and can start the next one at once. It sends the completion
   notification only when every command of the finished task has been
   answered. The notification does three things:
   - frees the L1 slot and returns the dispatcher credit;
   - updates the MPQ;
   - reaches the NIC, with `last_use` set when the L2 copy of the packet may
     be freed and `mpq_free` set when the MPQ has been released.

## Keeping the system alive

Two watchdogs are built in.

**Stuck messages (`mpq_monitor`).** A message whose last packet never arrives
would hold its MPQ for ever. The monitor keeps a tree pseudo-LRU order over
all 256 MPQs. Every arriving HER moves its MPQ to the back and restarts its
timer. The monitor looks at the front entry (the "candidate victim"):
- If the victim is busy, it is rotated to the back, so the walk reaches every
  MPQ.
- If the victim is idle (active, but nothing queued or running) and has been
  quiet longer than the execution context's `mpq_timeout`, the monitor asks
  the MPQ engine to reset it. The engine frees its queued packets and sends
  an error notification with `mpq_free` set.

**Stuck handlers (`hpu_driver`).** Each driver counts the cycles of the
running handler. When the count passes `hpu_timeout`, it raises `irq_o` for
the core. The runtime then writes an error code instead of the doorbell. The
driver reports the failure with a HostDirect write of {message id, handler
kind, code} to the context's host descriptor address. It then sends a
completion notification flagged as an error.

## The HPU driver, seen from the core

All registers are 32 bit, at byte offsets.

| Offset | Access | Contents |
|---|---|---|
| 0x00 | R | handler pointer (header, payload or completion, by task kind); stalls while there is no task |
| 0x04 / 0x08 | R | L1 address / size of the packet |
| 0x0C | R | L2 address of the packet |
| 0x10 / 0x14 | R | handler memory base / size |
| 0x18 / 0x1C | R | L1 scratchpad base / size |
| 0x20 | R | {kind[9:8], message id[7:0]} |
| 0x24 | W | doorbell: handler done |
| 0x28 | W | error code: handler failed |
| 0x40 | W | command source |
| 0x44 / 0x48 | W | command destination, low / high |
| 0x4C | W | command length |
| 0x50-0x6C | W | 32 B immediate data |
| 0x70 | W | issue, data = type: 0 NIC, 1 DMA, 2 HostDirect; stalls until accepted |
| 0x74 | R | commands of this task in flight |
| 0x78 | R | same count, but stalls until it is 0 |
| 0x7C | R | sticky command-error flag |

Each HPU can have up to four commands in flight. A one-bit task generation
stored with each command lets the driver count the commands of the finished
(held) task apart from those of the running one.

The driver also drives four PMP regions for the core:
- the program memory;
- the task's L1 packet slot;
- its handler-memory region;
- its scratchpad.

## Memories and interconnect

| Region | Base | Organisation |
|---|---|---|
| L1 (per cluster) | 0x1000_0000 | 1 MiB, 64 word-interleaved 32-bit banks; first 32 KiB = 32 packet slots |
| L2 packet buffer | 0x1C00_0000 | 4 MiB, 32 groups of 512 bit, two ports |
| L2 handler memory | 0x1C40_0000 | 4 MiB, 32 banks of 64 bit, two ports |
| Program memory | 0x1D00_0000 (for PMP) | 32 KiB, 64 bit, one port |

**L1 (`l1_tcdm`).** The L1 serves the 8 HPU ports and one 512-bit DMA port.
- A wide access takes 16 consecutive banks and has priority.
- Each bank arbitrates its HPU requests round-robin. A loser retries;
  `conflict_o` marks the cycle.
- Reads answer in the next cycle.

**L2 (`l2_mem`).** Both L2 memories have two ports.
- Port A faces the NHI interconnect (host, NIC inbound, NIC outbound,
  off-cluster DMA).
- Port B faces the DMA interconnect (the four cluster DMA engines).
- When both ports hit the same bank group, one is granted and the winner
  alternates.

**Interconnects (`mem_xbar`).** Both are request/grant crossbars with one
round-robin arbiter per memory. Read data is routed back through a registered
master index, which is valid because every memory answers exactly one cycle
after the grant.

**Program memory (`prog_mem`).** It has a host port, for loading code, and a
refill port meant for the instruction caches.

## Where this RTL departs from the published design

Not built:
- **PE interconnect.** Handlers therefore cannot load or store the L2
  memories or another cluster's L1 directly. They reach L2 only through
  commands. Workloads that keep their tables in L2 handler memory
  (filtering, key-value cache, strided copy with an L2 layout descriptor)
  cannot run as published.
- **Per-cluster instruction cache** (4 KiB, 4-way, 8 ports). The
  program-memory refill port is brought out to the top level instead.
- **RISC-V cores, IOMMU, NIC inbound/outbound engines and PCIe host
  interface.** Their connections are top-level ports.

Simplified:
- **AXI.** The published interconnects and DMA engines are AXI4 library
  components. Here they are minimal request/grant logic with the same
  connectivity and widths.
- **Off-cluster DMA.** It moves PsPIN memory to the host only, one command at
  a time.
- **Cluster DMA.** It does only the L2-to-L1 packet copy, not handler-issued
  L1/L2 transfers.

Own choices, where the published description is silent:
- the number of MPQs (256);
- the HER buffer depth (64);
- the L1 slot size (1 KiB, so at most 1 KiB of a packet is copied);
- home cluster = message id mod 4;
- credits as the measure of cluster load;
- the register map;
- the command-id encoding;
- the address map;
- all arbitration orders.

Not checked: the published latency figures (26 ns for a 64 B packet, 40 ns
for 1 KiB, from arrival to handler start). The end-to-end test shows the
pipeline, but it does not measure those latencies against the published
numbers.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself after a fixed cycle budget.

| Testbench | What it checks |
|---|---|
| `tb_l2_mem` | random two-port traffic at 4 MiB against a byte-wise model; conflict grant and alternation |
| `tb_l1_tcdm` | 8 HPU ports plus the wide port at 1 MiB: one grant per bank, no grant under the wide port, read data one cycle later |
| `tb_prog_mem` | single-port arbitration and data |
| `tb_mem_xbar` | 4 masters and 2 one-cycle memories: data routed to the right master, one grant per memory |
| `tb_cluster_dma`, `tb_offcluster_dma` | beat data, addresses, byte enables of the last beat, completion timing |
| `tb_host_direct` | address, data, waiting for the host acknowledgement, response id |
| `tb_cmd_unit` | routing by command type, responses to the right cluster, no starvation |
| `tb_task_dispatcher` | home choice, least-loaded fallback and blocking against a credit model |
| `tb_mpq_monitor` | only idle, expired MPQs are reset; every abandoned MPQ is reset eventually |
| `tb_pspin` | end-to-end test of the whole unit at default size (below) |

`tb_pspin` runs the whole unit at its default size. Around it are 32
behavioural HPUs (`hpu_model`), NIC, host and program-memory models. It sends
245 packets:
- eight 5-packet messages with all three handlers, whose payload handlers
  issue plain, DMA, NIC and HostDirect commands;
- four interleaved 50-packet messages with long handlers, which fill every
  cluster and stall the dispatcher;
- a message that never ends, which the MPQ monitor must reset;
- a handler that never returns, which the watchdog must catch and which must
  be reported to the host;
- a header-only message.

It checks:
- packet data in L1, at the host and at the NIC;
- sPIN ordering;
- that every packet is released exactly once, and only after its command
  finished;
- that every MPQ is released;
- the error notifications.

It also counts each mechanism and fails if one never occurred: home dispatch,
dispatcher stall, MPQ time-out, watchdog, L1 bank conflict, L2 port conflict,
clock gating and background host reads. The run takes about 3,500 cycles.

### Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/pspin_pkg.sv tb/pspin_tb_pkg.sv rtl/*.sv tb/hpu_model.sv tb/tb_pspin.sv \
  --top-module tb_pspin -Mdir obj_pspin
./obj_pspin/Vtb_pspin
```

A unit testbench needs the package, the module, its helpers (`rr_arb`,
`sync_fifo`) and the testbench file, for example:

```
verilator --binary --timing --assert -Irtl rtl/pspin_pkg.sv rtl/rr_arb.sv \
  rtl/l1_tcdm.sv tb/tb_l1_tcdm.sv --top-module tb_l1_tcdm
```

## Files

- `rtl/pspin_pkg.sv`: sizes, address map, and the HER, task, notification
  and command types.
- `rtl/pspin.sv`: the top level.
- `rtl/pspin_cluster.sv`: one cluster.
- The other files in `rtl/` are the blocks described above, plus two helpers:
  `rr_arb` (round-robin arbiter) and `sync_fifo`.
