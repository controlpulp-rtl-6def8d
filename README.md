# ControlPULP in SystemVerilog: a parallel power controller for many-core processors

A modern server processor cannot run every core at full voltage and
frequency. It would exceed its thermal design power or its hot spots would
overheat. An on-die power controller therefore runs a control loop. Every few
hundred microseconds it reads the temperature, voltage and power sensors of
all cores. It takes the power and performance requests from the operating
system and the board controller into account. Then it sets a new operating
point per core. With tens of cores this control step costs real compute time,
and the requests from the operating system must be answered within a few tens
of cycles.

ControlPULP handles this with two RISC-V domains:

* A **manager domain**: one core that runs the real-time firmware, services
  interrupts and owns the I/O.
* A **cluster domain**: eight worker cores that share a fast L1 memory and a
  2-D DMA. The manager hands the per-core control law to the workers, each
  worker computes the control action for its share of the controlled cores, and
  they meet at a hardware barrier.

Three paths connect the controller to the processor it manages:

* An AXI4 master reaches the sensor registers and the clock/voltage controls.
* An AXI4 slave lets a secure boot agent load the firmware into L2.
* A set of SCMI mailboxes carries the operating system's requests. Each
  mailbox rings a doorbell interrupt.

This repository gives synthesizable SystemVerilog for the logic around the
cores: memories and interconnect, the interrupt controller, the mailboxes,
the DMA, the event unit, the timers and the AXI bridges. The cores
themselves (CV32E40P with FPU), their instruction caches, the debug module,
the peripheral DMA (uDMA) with its I2C/SPI/PMBus/AVSBus controllers, the clock
generation and the clock-domain crossings are not included. The top brings
out their connection points as ports.

## Block diagram

```
                 manager core ports              SCMI agents (HPC processor)
                 instr     data   irq                  |
                   |        |      ^                   v
                   |   +----+------+-----+      +--------------+  doorbells (64)
                   |   | manager demux   |----->| scmi_mailbox |-----------+
                   |   +--+---+---+---+--+      +--------------+           |
                   |      |   |   |   |                                    v
                   |      |   |   |   +--> clic (256 lines) <-- SoC timer, ext_irq_i
                   |      |   |   +------> pulp_timer (SoC)
  uDMA x2 --+      |      |   +--> arbiter --> cluster_domain (SoC port)
            v      v      v                       |
  AXI slave -> axi_to_tcdm -> demux ---------------+
            |                                      |
            +--------> l2_mem: 2 private + 4 interleaved banks (512 KiB)
                                ^
   cluster_domain (external port) --> demux --> L2, or tcdm_to_axi --+
   manager demux -----------------------------> tcdm_to_axi --------+
                                                                     v
                                                 axi_mux --> AXI master port
  cluster_domain: 8 worker ports + icache port
     per-worker demux --> l1_tcdm (16 banks, 64 KiB), event_unit,
                          cluster timer / DMA registers, external port
     dma_2d: L1 port into l1_tcdm, external port into the cluster's external arbiter
```

## The word bus

Everything inside the two domains speaks one word-wide protocol (`tcdm_req_t`
/ `tcdm_rsp_t` in `cpulp_pkg`). The protocol has a 32-bit address, 32-bit
data and byte enables.

* A master holds `req` until it sees `gnt`. The target sets `gnt`
  combinationally in the same cycle.
* For every grant, the master gets exactly one `rvalid`, writes included.
* Responses come back in request order. Memories answer one cycle after the
  grant. Bridges to AXI answer when the AXI response arrives.
* Blocking registers of the event unit hold `rvalid` back until the event
  arrives.
* `err` reports a refused access, for example a non-manager master touching a
  private L2 bank or an address that decodes nowhere.

Three small helpers build all the interconnect:

* `tcdm_demux` sends one master to one of several targets. It changes target
  only when no response is outstanding, so responses stay in order.
* `tcdm_arbiter` merges masters onto one target with round robin. It records
  the grant order in a FIFO so that each response returns to its owner.
* `tcdm_xbar` is the banked crossbar. Each bank has its own round-robin
  arbiter, and word addresses are interleaved across the banks.

## Memories

**L2 (`l2_mem`)** has 512 KiB in six banks:

* Two 64 KiB banks are private to the manager core. Only masters 0 and 1, its
  instruction and data ports, may reach them. Any other master gets `err`.
  This keeps DMA traffic from disturbing the manager's fetches.
* Four 96 KiB banks are word-interleaved and shared by all masters: the
  manager, the AXI slave, the cluster and two uDMA channels.

An access without a conflict takes one cycle.

**L1 (`l1_tcdm`)** has 64 KiB in 16 word-interleaved banks. Ten masters reach
it through a single-cycle crossbar: eight workers, the DMA and the manager
domain. Two masters that hit the same bank in the same cycle are
serialised, and the loser is granted in the next cycle.

## Interrupts: CLIC and SCMI mailboxes

The CLIC (`clic`) has 256 lines. Each line has one register word at
`0x1000 + 4*i`:

| bits | field |
|---|---|
| [0] | pending |
| [8] | enable |
| [16] | selective hardware vectoring |
| [17] | edge trigger |
| [18] | falling edge |
| [31:24] | 8-bit control value |

The upper `nlbits` bits of the control value (`cliccfg[4:1]`) are the level.
The remaining bits are filled with ones. An interrupt is offered when its
level exceeds both the threshold register (`0x4`) and the level the core is
currently running at. Comparing against the core's level is what allows
nesting.

Arbitration runs on the next-state pending bits, and the winner is
registered. A source that rises in cycle *n* is therefore offered in cycle
*n+1*. The manager claims the interrupt with `irq_ready_i`, and a claim
clears an edge-triggered pending bit. Level-triggered lines follow their
source.

The mailbox unit (`scmi_mailbox`) has 64 channels of 40 bytes, i.e. ten
words each, 2560 bytes in total. The words of a channel are:

| word | content |
|---|---|
| 0 | agent id, so that several agents can share a channel |
| 1 | channel status; bit 0 = free |
| 2-3 | reserved |
| 4 | flags; bit 0 = the agent wants a completion interrupt |
| 5 | length |
| 6 | message header |
| 7-8 | 8-byte payload |
| 9 | doorbell |

Bit 0 of the doorbell word drives the channel's doorbell line. The top wires
the 64 doorbells to CLIC lines 32..95 and the SoC timer to line 7. The agent
side and the platform side have separate ports, and the platform wins a
same-cycle write.

When the platform frees a channel whose flags ask for it, a completion pulse
goes back to the agent. A typical exchange:

1. The agent fills the channel and writes 1 to the doorbell.
2. The manager takes the interrupt and reads the payload.
3. The manager clears the doorbell and writes status = 1.
4. The agent sees the completion pulse.

## Cluster: event unit, barrier, DMA

The **event unit** (`event_unit`) gives each worker a 32-bit event buffer and
a mask. The events are:

| bit | event |
|---|---|
| 0 | software event from another worker |
| 1 | DMA done |
| 2 | cluster timer |
| 3 | event sent by the manager (offload) |

Reading `EVT_WAIT_CLR` blocks the worker until a masked event is buffered.
`core_sleep_o` is high during the wait, so the clock could be gated. Reading
`BARRIER_WAIT` blocks until every member of the team has read it. All members
are released in the same cycle, one cycle after the last arrival. The manager
can trigger events and set the team through its own port.

The **DMA** (`dma_2d`) moves REPS rows of LEN bytes. Row *r* is read from
`SRC + r*SRC_STRIDE` and written to `DST + r*DST_STRIDE`. One end must lie in
L1, and the other end goes to the cluster's external port, i.e. L2 or the AXI
master. This is how a single command gathers equally spaced sensor registers
(LEN = 4, source stride = register spacing) into a dense L1 array.

Reads are issued without waiting for data. Up to 128 can be in flight, which
hides the network latency to the sensors. The data is buffered, and writes
drain it in order. Descriptors are queued four deep. A `done_o` pulse, a
done counter and an event to the workers mark each completed transfer.

DMA registers (byte offsets):

| offset | register |
|---|---|
| 0x00 | SRC |
| 0x04 | DST |
| 0x08 | LEN |
| 0x0C | SRC_STRIDE |
| 0x10 | DST_STRIDE |
| 0x14 | REPS |
| 0x18 | CMD (write to enqueue) |
| 0x1C | STATUS ([0] busy, [15:8] queued) |
| 0x20 | DONE_CNT |

The **timers** (`pulp_timer`, one in each domain) have a 64-bit counter, an
8-bit prescaler and a 64-bit compare. The compare can raise an interrupt and
can reset the counter.

| offset | register |
|---|---|
| 0x00 | CFG: [0] enable, [1] clear, [2] irq enable, [3] reset on match, [15:8] prescaler |
| 0x04/0x08 | counter |
| 0x0C/0x10 | compare |

## AXI side

The AXI ports use 32-bit addresses and 64-bit data.

* `tcdm_to_axi` turns each word request into a single-beat AXI transaction.
  The word rides in the lane given by address bit 2. Many transactions may be
  in flight (128 on the cluster path). An order FIFO makes sure responses
  return in request order even when reads and writes are mixed.
* `axi_to_tcdm` is the slave bridge used for boot loading. It serves one
  burst at a time (INCR or FIXED, any length, narrow or full beats) with one
  word access per 32-bit half. A refused word turns into SLVERR.
* `axi_mux` merges the manager path and the cluster path onto the master
  port. It arbitrates AW and AR with round robin and extends the ID by one
  bit that names the source, and B and R are routed back by that bit. A FIFO
  of granted AW sources steers the W beats.

## Address map

| region | base | size |
|---|---|---|
| L1 | 0x1000_0000 | 64 KiB |
| cluster event unit | 0x1020_0000 | 1 KiB |
| cluster timer | 0x1020_0400 | 1 KiB |
| cluster DMA | 0x1020_0800 | 1 KiB |
| SoC timer | 0x1A10_B000 | 256 B |
| CLIC | 0x1A20_0000 | 8 KiB |
| mailboxes (platform side) | 0x1A30_0000 | 4 KiB |
| L2 private | 0x1C00_0000 | 128 KiB |
| L2 shared | 0x1C02_0000 | 384 KiB |
| anything else | AXI master | |

The agent port of the mailboxes is addressed from 0. From the workers, L1 and
the cluster peripherals are local, and every other address leaves through the
cluster's external port to L2 or AXI.

## Departures from the original design

* One clock. The original has clock-domain crossings on the AXI paths between
  cluster, SoC and the outside.
* The DMA is a single-channel engine with a descriptor queue and 32-bit
  accesses, not a multi-channel burst engine.
* The AXI bridges move one word per transaction or per access.
* The original design does not publish the register layouts of the CLIC,
  mailbox, event unit, DMA and timers, so the layouts here are this design's
  own. The CLIC layout follows the spirit of the RISC-V CLIC draft.
* The bank sizes of L2 (2 x 64 KiB private, 4 x 96 KiB shared) are chosen
  here so that six banks give 512 KiB.
* The mailbox unit lives inside the top so that its doorbells can be wired to
  the CLIC. The original draws it at the edge of the controller.
* The manager's peripherals hang off a simple address demux instead of an APB
  bus.

## Simulation

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The testbenches are for two-state
simulation and generate their stimulus with `$urandom`. With Verilator 5,
for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    --top-module tb_controlpulp rtl/cpulp_pkg.sv tb/tb_controlpulp.sv
./obj_dir/Vtb_controlpulp
```

`tb_controlpulp` runs the whole top at its default size: 8 workers, 256 CLIC
lines, 64 mailbox channels, 512 KiB L2, 64 KiB L1 and 128 DMA reads in
flight. It plays the cores, the boot agent, an SCMI agent, the uDMA and a
sensor space behind the AXI master with up to 40 cycles of random latency. It
walks through one control step:

1. Boot image over AXI, fetched back by the manager.
2. Private-bank protection.
3. uDMA writes into L2.
4. A doorbell interrupt, served and completed.
5. A SoC-timer interrupt.
6. The manager's offload event to the workers.
7. A 2-D DMA gather of 128 sensor registers.
8. Partial sums and the barrier.
9. DMA of the results to L2.
10. An L1 bank conflict.
11. A cluster-timer wake-up.
12. Simultaneous AXI traffic from both domains.

It counts every mechanism and fails if any of them never happened. It
finishes in well under a second.

The other testbenches stress a single block with random traffic:

* bank conflicts and private-bank refusal in L2;
* the latency and arbitration rules of the CLIC;
* the mailbox doorbells and completion;
* barriers with random arrival times;
* DMA gathers and queued 2-D copies against a memory with random latency;
* the AXI bridges and the mux against a behavioural AXI memory
  (`tb/axi_mem_model.svh`).
