# End-to-end QoS hardware for a six-core RISC-V SoC

In a multicore chip for safety-related real-time work, the cores share an
on-chip bus, a network-on-chip (NoC) and a memory controller at a fine grain.
One core can slow the others down a lot, and software cannot see who is
responsible. Counting transactions does not help much: one transaction may
hold a shared resource for a few cycles or for hundreds. This RTL gives the
SoC three QoS features that work together from the core to the DRAM:

1. **Ownership travels with every request.** The index of the core that owns
   the bus is written into the 4-bit AXI QoS field of every request that
   leaves for the NoC. Accelerators write their own ID there. So every unit
   downstream can tell whose request it is handling.
2. **Contention is measured in cycles, for each pair of initiators.** A
   statistics unit (PMU) watches the bus, the NoC and the memory controller. Every
   cycle in which initiator *j* holds up initiator *i* adds one to a counter
   for the pair (*i*, *j*).
3. **Quotas are enforced.** Each core can get a budget of contention cycles
   that it may cause on others. When a core uses up its budget, the PMU
   either raises an interrupt for a monitoring task or, in *hardware quota*
   mode, stalls that core at the bus arbiter. A stalled core still gets the
   bus when nobody else wants it, so it is slowed down but never starved.

The design follows the QoS architecture published for the SELENE platform,
an open-source RISC-V SoC with NOEL-V cores. The processors, caches, DRAM
controller and accelerators come from elsewhere and are not included here.
This RTL covers the QoS parts that sit between them.

## Structure

```
 core0 ... core5                                 acc0  acc1  acc2   (external AXI masters,
   |         |                                     |     |     |     QoS = 6, 7, 8)
 +-----------------------------+                   |     |     |
 | ahb_bus                     |<-- quota_stall -+  |     |     |
 |  ahb_qos_arbiter (RR+quota) |                 |  |     |     |
 +-----------------------------+                 |  |     |     |
        | owner's transfer, s_master             |  |     |     |
        +--> PMU window (0xFFFF_F000) --> safesu (statistics unit) --> irq
        |                                   ^   ^
        v                                   |   | pending / serving per ID
 ahb2axi_id_bridge  (QoS := s_master)       |   |
        | master 0                          |   |
 +----------------------------------------------------------+
 | axi_xbar  4 masters x 2 slaves, round robin per port     |
 +----------------------------------------------------------+
        | slave 0 (addr[31]=0)                    | slave 1 (addr[31]=1)
        v                                         v
  memory-controller port  --snooped by-->  2 x mc_request_monitor  (reads, writes)
  (external DRAM controller)               peripheral port (external)
```

| File | Module | Role |
|---|---|---|
| `rtl/selene_qos_pkg.sv` | package | request/response structs, widths, round-robin helper |
| `rtl/ahb_qos_arbiter.sv` | `ahb_qos_arbiter` | round-robin bus arbiter with quota stalls |
| `rtl/ahb_bus.sv` | `ahb_bus` | shared bus: arbiter plus transfer multiplexing |
| `rtl/ahb2axi_id_bridge.sv` | `ahb2axi_id_bridge` | bus-to-AXI bridge that writes the core ID into QoS |
| `rtl/axi_xbar.sv` | `axi_xbar` | NoC crossbar, round robin on every port |
| `rtl/mc_request_monitor.sv` | `mc_request_monitor` | per-initiator pending-request FIFOs, per-ID pending/serving |
| `rtl/safesu.sv` | `safesu` | pair-wise contention counters, quotas, interrupt, stall |
| `rtl/selene_qos_top.sv` | `selene_qos_top` | wires all of the above together |

## How a request is tagged

The tag has to survive three hops. Each hop uses a different field.

* **On the bus** the owner is the arbiter's grant index (the AHB `HMASTER`).
  Only one transfer is on the bus at a time, so the owner identifies it.
* **At the NoC boundary**, `ahb2axi_id_bridge` copies the owner index into
  `qos` and sends every core request with the same AXI ID. In the full SoC
  the shared L2 cache does this on its NoC port. This RTL has no L2 cache,
  so the bridge stands in its place and forwards every bus transfer as one
  AXI transfer. (The source design names this bridge as its own option for
  an SoC without an L2 cache.)
* **Inside the crossbar**, the upper half of the 8-bit AXI ID is replaced by
  the index of the master port (0 = bridge, 1..3 = accelerators). Responses
  are routed on that field. The memory controller also gets from it the
  *initiator*, meaning the port a request came through. The *owner* is still
  in `qos`.

So each request at the memory controller carries two identities. The
initiator tells which FIFO the request belongs to. The owner (core_id) tells
whom to charge for its delay.

## The bus and the hardware quota

`ahb_bus` is a simple non-pipelined shared bus. A core raises `m_valid[i]`
with its transfer and holds it until it gets `m_done[i]`. The transfer owns
the bus from the grant until the slave finishes. A read that has to go all
the way to DRAM therefore blocks the bus for the whole memory latency. Bus
contention is caused by this occupancy, not by the number of transfers.

`ahb_qos_arbiter` decides when the bus is free or when the current transfer
finishes (`done`). Its grant is registered, so the new owner drives the bus
from the next cycle and a finished transfer is followed at once by the next
one. The rules, in order:

1. Candidates are the requesting cores, except the one that has just
   finished.
2. Cores with `stall[i]` set (quota used up, hardware-quota mode) are
   removed, but only if some other candidate remains.
3. The first remaining candidate after the previous owner, in circular
   order, gets the bus.

Rule 2 is the protection against starvation: an offending core can only use
bus time that nobody else wants. `quota_skip` is high in a cycle in which
the arbiter passes over a stalled core.

## Contention accounting (`safesu`)

This is the central part of the design. Every cycle the unit computes three
matrices of one-bit "hits", one for each shared stage a request passes:

* **Bus**, 6 x 6: `bus_hit[i][j]` is set when core *i* requests the bus and
  core *j* owns it.
* **NoC**, 9 x 9, over IDs 0..5 (cores) and 6..8 (accelerators):
  `noc_hit[i][j]` is set when a request owned by *i* waits for a crossbar
  slave port that a request owned by *j* (*j* ≠ *i*) holds. The crossbar
  reports, for each slave port, the owner ID of the request that holds it and
  the set of owner IDs that wait for it. All six cores share one crossbar
  port, so they never hold each other up here. Their mutual delays show in
  the bus matrix instead.
* **Memory**, 9 x 9, over the same IDs: `mem_hit[i][j]` is set when a request of *i* is waiting at the memory
  controller while a request of *j* (*j* ≠ *i*) is being served.

Each hit adds one to that pair's 32-bit counter. Counting runs only while
CTRL bit 0 is set. The counters are cumulative, so software reads them and
subtracts to get the contention in a time window.

A pair-wise matrix is more useful than per-core totals. From a row, software
sees who delayed one task. From a column, it sees how much damage one
offender did. Some cases are deliberately not charged: a request waiting
behind another request of the same owner, and a request waiting for an idle
bus during the single arbitration cycle.

**Quotas.** `QUOTA[j]` holds the bus-contention cycles that core *j* may
still cause. While counting is on and `QUOTA_EN[j]` is set, it drops each
cycle by the number of cores that *j* is holding up on the bus. For example,
if four cores wait while *j* owns the bus, it drops by 4. It stops at zero.
A core whose quota is enabled and at zero is *exhausted*. Then:

* with CTRL bit 2 (irq enable) set, `irq` goes high. It stays high until
  software reloads the quota or clears that core's `QUOTA_EN` bit;
* with CTRL bit 1 (hardware quota) set, `quota_stall[j]` goes to the bus
  arbiter.

Both enables may be set together. Only bus contention is charged against
the quota. Memory contention is counted but does not use up any budget.

### Register map

The registers are 32 bits wide. On the bus, register *n* is at byte address
`PMU_BASE + 4*n`, and `PMU_BASE` defaults to `0xFFFF_F000`. Accesses finish
in the cycle they are presented (zero wait states) and never reach the NoC.

| Word | Name | Access | Contents |
|---|---|---|---|
| 0x000 | CTRL | RW | [0] count enable, [1] hardware quota, [2] irq enable; writing [31]=1 clears all counters |
| 0x001 | QUOTA_EN | RW | [5:0] cores whose quota is enforced |
| 0x002 | STATUS | RO | [5:0] exhausted cores |
| 0x008 + j | QUOTA[j] | RW | remaining budget of core *j*; a write reloads it |
| 0x040 + 6i + j | BUSCNT[i][j] | RO | bus cycles core *j* delayed core *i* |
| 0x100 + 9i + j | MEMCNT[i][j] | RO | memory cycles ID *j* delayed ID *i* |
| 0x200 + 9i + j | NOCCNT[i][j] | RO | crossbar cycles ID *j* delayed ID *i* |

## Memory-controller request monitor

The memory controller sees requests through a handful of initiator ports.
Each port mixes the traffic of several owners; port 0 carries all six cores.
`mc_request_monitor` keeps, for each initiator, a small FIFO that mirrors
the controller's queue for that initiator:

* each entry holds `valid` and `core_id` (the owner taken from the QoS bits);
* each FIFO has `write_ptr`, `read_ptr`, `numpending` and `full`.

An initiator's requests are answered in order, so the head entry is always
the oldest one. The monitor takes three events from the controller:

* **push**: the controller accepts a request;
* **serve**: the controller starts working on the head request of an
  initiator (`mem_serve_*` at the top);
* **pop**: the controller returns the response for the head request.

From the FIFOs the monitor forms two bits for every owner ID:

* `serving[c]`: a head entry that is being served belongs to *c*;
* `pending[c]`: any other valid entry belongs to *c*.

These bits go to the PMU. The SoC has two monitors, one for reads and one
for writes, and ORs their outputs together. The top uses `full` as
back-pressure: a request whose FIFO is full is held back from the
controller, so the monitor never loses track of a request. `overflow` flags
a push that was dropped anyway; that can only happen if the monitor is used
without this back-pressure. The outputs are combinational from registered
state, so they change in the cycle after the event.

## The NoC crossbar

`axi_xbar` connects 4 masters to 2 slaves. Slave 0 is memory (address
bit 31 = 0) and slave 1 is the peripherals (bit 31 = 1). Each slave port has
a round-robin arbiter over the masters that address it. Each master port has
one over the slaves that return responses to it. Requests pass
combinationally once granted. If a slave does not accept, the choice is
locked so that the slave sees a stable request. `slave_conflict[s]` is high
when more than one master wants slave *s*. `port_held`, `port_holder` and
`port_waiting` report, for each slave port, the owner ID (QoS) of the
request presented to it and the owner IDs of the other masters addressing
it; these feed the NoC matrix of the statistics unit. The QoS bits pass through
unchanged. The crossbar does not enforce ordering between different slaves
for the same AXI ID. The bridge has only one transfer outstanding, so this
does not matter for it. An accelerator that mixes slaves must not have
requests to both outstanding at the same time.

## Interfaces and timing

* **Reduced AXI** (`axi_req_t`, `axi_rsp_t` in the package): one request
  channel (address, write flag, 64-bit write data, 8-bit ID, 4-bit QoS) and
  one response channel (read data, write flag, ID). Both use valid/ready.
  Every transfer is a single beat. The separate AW, W, AR, R and B channels
  of full AXI are folded into these two.
* **Bus** (`bus_req_t`): address, write flag, write data. The transfer is
  held with `valid` until a one-cycle `done`. Read data comes with `done`.
* **Memory controller port** of `selene_qos_top`: reduced AXI plus
  `mem_serve_valid`, `mem_serve_write` and `mem_serve_init`. The controller
  pulses these for one cycle when it starts serving the oldest request of an
  initiator. The initiator is bits [5:4] of the request's AXI ID.
* **Latency** with an idle system: a core transfer to memory is granted one
  cycle after it is raised. The bridge presents it to the NoC in the cycle of
  the grant. The core sees `done` in the same cycle as the controller's
  response. A PMU register access completes in the first cycle the core owns the bus.

## Parameters

| Module | Parameter | Default | Origin |
|---|---|---|---|
| `selene_qos_top` | `N_CORES` | 6 | six cores in the source SoC |
| | `N_ACC` | 3 | three accelerator masters in the source SoC diagram |
| | `MC_DEPTH` | 8 | this design's choice |
| | `PMU_BASE` | 0xFFFF_F000 | this design's choice |
| `safesu` | `NC`, `NID`, `CW`, `NSL` | 6, 9, 32, 2 | the register map allows NC ≤ 8 and NID ≤ 16 |
| `axi_xbar` | `NM`, `NS` | 4, 2 | NM ≤ 16 (the master index takes 4 ID bits) |
| `mc_request_monitor` | `NI`, `NC`, `DEPTH` | 4, 9, 8 | |

Owner IDs must fit the 4-bit QoS field, so N_CORES + N_ACC ≤ 16.

## What follows the source design and what does not

These parts follow the published architecture:

* round-robin arbitration on both the bus and the NoC;
* the choice between an interrupt and hardware-quota stalling when a core
  exhausts its quota;
* the quota line from the PMU to the bus controller;
* core IDs written into the AXI QoS bits before the NoC, with accelerators
  supplying their own;
* the PMU snooping the bus, the NoC and the memory controller;
* the monitor's per-initiator FIFO fields and per-core pending/serving
  outputs, in separate read and write copies.

These are choices of this RTL, because the source gives no details:

* the bus handshake (no AHB pipelining or bursts);
* the reduced AXI channels;
* the address map;
* exactly how contention is charged to a pair, and the quota arithmetic;
* the register map and PMU window;
* the starvation-avoidance rule (a stalled core may use an otherwise idle
  bus);
* the monitor's serve/pop event interface, its depth and its back-pressure.

The published SoC has a shared L2 cache, which can be partitioned by space.
That cache is not modelled. Its NoC port is replaced by the ID-injecting
bridge, so every bus transfer goes to memory as a miss would. The PMU is
reached over the on-chip bus, as in the source SoC. The AXI-lite and APB
peripheral paths of that SoC are not modelled; peripherals are reached
through the crossbar's second slave port.

Some other parts of the source SoC are also left out:

* The snoop-based coherence between the cores' L1 caches on the bus.
* The per-core event inputs of the statistics unit. In the source SoC the
  unit also connects to each core, but it is not described what it receives
  from them.
* QoS-aware arbitration in the NoC. The source keeps round robin as the
  default and only prepares the IDs for a smarter policy.

The source's two SoC diagrams disagree on the number of accelerators: one
draws three, the other one. Three crossbar master ports are provided
(`N_ACC` = 3).

## Verification

Each module has a self-checking testbench in `tb/`. Each one compares the
module against a reference model written independently in the testbench. It
ends with a line `TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_ahb_qos_arbiter` | cycle-by-cycle owner against a reference model under random requests, transfer lengths and stalls; strict rotation; stalled core skipped and lone offender served |
| `tb_ahb_bus` | the slave sees exactly the owner's transfer; read data routing; completion order is round robin; a stalled core is kept off a busy bus; no starvation |
| `tb_ahb2axi_id_bridge` | QoS = owner on every request; one outstanding; `done` in the response cycle |
| `tb_axi_xbar` | ID extension, QoS pass-through, response routing and data; round-robin rotation at a saturated slave; conflicts occur |
| `tb_mc_request_monitor` | pending/serving/full/numpending/overflow every cycle against SV queues, through fill and drain phases |
| `tb_safesu` | all counters and quotas against a reference; irq only when enabled; stall only in hardware-quota mode; counter clear |
| `tb_selene_qos_top` | whole system at default parameters (see below) |

`tb_selene_qos_top` runs the full design at its default size. It uses a
behavioural DRAM controller, `tb/mem_ctrl_model.sv`, which serves requests
in order with random latency. The testbench drives six cores with random
reads and writes to their own regions, plus some peripheral accesses. Three
accelerators each keep up to 12 requests outstanding. Core 0 also acts as
the monitoring software and programs the PMU over the bus. The run checks:

* every read against a reference memory;
* the QoS tag of every request at the controller;
* the per-ID pending/serving bits, every cycle, against the controller
  model's queue;
* the full bus and memory contention matrices read back over the bus,
  against counts kept by the testbench;
* the NoC matrix: it must be non-zero, and zero between any two cores.

It has three phases:

1. Interrupt mode. The monitoring core reacts to the interrupt: it reads
   STATUS and withdraws the quota.
2. Hardware quota on two cores under heavy core traffic.
3. The same quotas with light core traffic and heavy accelerator traffic.

It counts, and requires, each of these: bus contention, the quota interrupt,
quota stall and skip, an exhausted core being served alone, crossbar
conflicts, monitor back-pressure, memory and NoC contention, and peripheral accesses.

To run a testbench with Verilator 5, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  rtl/selene_qos_pkg.sv tb/tb_selene_qos_top.sv --top-module tb_selene_qos_top
./obj_dir/Vtb_selene_qos_top
```

Replace the top-module name to run any other testbench. The top-level
testbench takes a few seconds.

## Limits

* The statistics unit charges contention to pairs of initiators. It does not
  split contention by the address or bank involved.
* Only bus contention uses up a quota. Memory contention is counted but not
  budgeted.
* The NoC has no QoS-aware arbitration. It stays round robin; the IDs are
  carried through so that such a policy could be added at the crossbar's
  arbiters.
* The memory monitor sees only what the controller reports. Requests inside
  the DRAM scheduler beyond the head of each initiator's queue count as
  pending.
