# Time-aware transmit scheduling for a multi-queue NIC

A NIC with many transmit queues normally serves them round-robin. That keeps
flows from blocking each other, but it gives software no say over how much of
the link each flow gets. This design adds a time-aware scheduler in front of
each Ethernet port. A repeating transmission window is cut into timeslots, and
each timeslot belongs to one queue. A queue that owns 90 % of the window gets
90 % of the port's transmission time, and so close to 90 % of its bandwidth,
whatever the other queues try to send. Software ties operating-system traffic
priorities to those queues, so the bandwidth split can be set per priority.

All ports time their slots from one PTP-disciplined clock. Nodes that run PTP
therefore agree on where each window starts.

The RTL is a NIC core for one compute node. It has four 10 Gb/s ports. Each
port has its own priority-to-queue insertion, TX queues, scheduler, transmit
engine, CRC and timestamp stage, and a receive path with a CRC check and RX
queues. The core also has a shared PTP clock and an AXI4-Lite register file.
The design follows the architecture described in "Enabling Time-Aware Priority
Traffic Management over Distributed FPGA Nodes". Where that description stops,
the choices here are this design's own, and they are listed at the end.

## The schedule

Each port has the following registers:

| register | meaning |
|---|---|
| `TAQ_BASE` | the first queue of the *time-aware group*, the `NUM_TAQ` (default 8) consecutive queues `TAQ_BASE .. TAQ_BASE+7` (modulo the queue count) that can own timeslots |
| `TQCR[t]` | timeslot length of group member `t` (queue `TAQ_BASE+t`), in microseconds (20 bits) |
| `SCR[i]` | the schedule table: entry `i` names the group member served in the i-th slot |
| `NSLOTS` | number of entries in use (up to `NUM_SLOTS`, default 8) |
| `CYCLE_US` | window length in microseconds |
| `GUARD_US` | guardband in microseconds |
| `CTRL[0]` | enable; when clear the port is a plain round-robin NIC |

An example program:
`SCR = {4, 1}`, `TQCR[4] = 100`, `TQCR[1] = 500`, `CYCLE_US = 700`.
The port serves queue `TAQ_BASE+4` for 100 µs, then queue `TAQ_BASE+1` for
500 µs, then has 100 µs of free time. Then the walk loops back to entry 0.

Rules the scheduler enforces:

* **A slot belongs to one queue.** During a slot only its queue may start a
  frame. If that queue is empty the port stays idle for the rest of the slot,
  even when other queues have traffic. This is what makes the split a
  guarantee rather than a hint.
* **Guardband.** No frame may start in the last `GUARD_US` microseconds of a
  slot, or of the free time. A frame that has started is never cut, so the
  next owner always starts on time. Set `GUARD_US` to at least the time the
  longest frame takes: at 10 Gb/s a 1500-byte frame needs 1.2 µs, so use 2 µs.
  With `GUARD_US = g` a slot of `d` µs can start frames during its first
  `d - g` microseconds. The guardband is the time the owner gives up.
* **Free time.** If `CYCLE_US` is longer than the sum of the slots, the rest
  of the window is free time. In free time, queues *outside* the time-aware
  group are served round-robin. Group queues wait for their own slots. If the
  window is shorter than the sum of the slots, the table simply loops with no
  free time.
* **Zero-length entries** (`TQCR = 0`) are skipped.
* **Switching on and off.** Setting `CTRL[0]` starts a fresh window at entry
  0, two clocks later. Clearing it returns the port to round-robin over all
  queues at once.

### How the scheduler is built (`tas_scheduler`)

The scheduler is a four-state machine: RR, LOAD, SLOT and FREE. It keeps three
counters, all advanced by the 1 µs pulse of the PTP clock:
* the schedule entry index;
* the microseconds left in the current slot;
* the microseconds since the window began.

LOAD takes one clock per entry. It fetches `TQCR[SCR[i]]`, skips zero-length
entries, and goes to FREE after the last entry, or back to entry 0 if the
window is already over. The grant is combinational from the state and the
queue-nonempty bits:
* in SLOT it is the slot queue, unless the guardband is on;
* in FREE it is the next non-group queue after the last one served;
* in RR it is the next non-empty queue.

The scheduler only decides which queue may *start* a frame. The transmit
engine takes a grant only when it is idle, so there is exactly one frame in
flight per port. That is why a guardband measured in whole frames is enough.

Slot lengths count PTP microseconds, not clock cycles. Rate trims of the PTP
clock therefore stretch or shrink the slots along with the clock, and all
ports of the node see the same slot edges.

## Data path of one port

```
host pushes (prio, addr, len) ─► tx_insert (PRIO_MAP: prio -> queue)
                                        │ (queue, addr, len)
                                  queue_bank (32 TX queues x 16)
                                        │ nonempty
                     tas_scheduler ◄────┘
                        │ grant
                     tx_engine ─── rd_req / rd_rsp ──► host memory
                        │ 64-bit stream
                     tx_fcs_ts (append FCS, timestamp first beat) ─► serializer
deserializer ─► rx_frame_buffer (CRC check, drop, arrival time)
                        │ committed frames
                     rx_engine ─── wr ──► host memory (frame, FCS, timestamp word)
                        │ (addr, len)
                     queue_bank (4 RX queues x 16) ─► host pops, irq per queue
```

* **Pointer insertion** (`tx_insert`). The host hands over each frame
  pointer with the frame's priority, 0 to 7. The port's PRIO_MAP gives
  each priority a range of consecutive TX queues: a first queue and a
  count. Pointers of one priority go to the queues of its range in turn,
  one queue per pointer. The rotation is strict: if the next queue is full,
  the pointer waits, so the order within each queue is known. With a count
  of one, the priority simply names the queue.
* **TX queues** (`queue_bank`) hold frame pointers only: a 32-bit address and
  a 16-bit length. The frames stay in host memory.
* **Transmit engine** (`tx_engine`). On a grant it pops the head pointer and
  reads the frame one 64-bit word at a time. Reads are issued only while
  there is room in its 8-word buffer, so read responses need no
  back-pressure. A frame of W words occupies the engine for W+6 clocks: 97 %
  of line rate for 1500-byte frames, about 57 % for minimum-size frames.
* **CRC and timestamp** (`tx_fcs_ts`) appends the Ethernet CRC-32. If the last
  beat has more than four data bytes, one extra beat is added. The stage
  reports the PTP time at which the frame's first beat left it.
* **RX buffer** (`rx_frame_buffer`), 512 words. It runs the CRC over every
  incoming byte, FCS included, and commits a frame only if the remainder is
  the Ethernet residue `0xDEBB20E3`. A bad frame, or one that meets a full
  buffer, is dropped by rewinding the write pointer. `drop_crc` or `drop_ovf`
  pulses once for each dropped frame. The input has no ready, as a MAC cannot
  stall the wire.
* **Receive engine** (`rx_engine`) takes a free host buffer from a 16-entry
  FIFO that software fills in advance. It writes the frame and its FCS there,
  then one 64-bit word `{seconds[33:0], nanoseconds[29:0]}` with the arrival
  time. It then pushes `(addr, len)` into the next RX queue in round-robin
  order and pulses that queue's `irq`. A host buffer must hold
  `len + 4` bytes rounded up to 8, plus 8 bytes.

## Clock and registers

`ptp_clock` keeps time in 48-bit seconds, 30-bit nanoseconds and 16 bits of
fractional nanoseconds. It adds `PTP_PERIOD` (16.16 ns, default 6.4 ns for
156.25 MHz) every clock. A PTP servo in software trims the rate by rewriting
`PTP_PERIOD`. It steps the phase by writing a signed nanosecond offset to
`PTP_ADJ`. The 1 µs pulse counts local elapsed time, so a phase step moves the
time of day but not the slot timing.

The AXI4-Lite address is 16 bits wide. Bits [15:12] select the page: port 0
to 3, or `0xF` for the global page. All registers are 32 bits wide, write
strobes are ignored, and unmapped addresses read 0. Most registers reset to
0, which means the schedule is off and every port runs plain round-robin.
`PTP_PERIOD` resets to 6.4 ns instead. `PRIO_MAP[p]` resets to priority *p*
on queue *p* alone.

| offset (port page) | register | | offset (page 0xF) | register |
|---|---|---|---|---|
| 0x000 | CTRL (bit 0 enable) | | 0x000 | PTP_PERIOD (16.16 ns) |
| 0x004 | NSLOTS | | 0x004 | PTP_ADJ (signed ns, write) |
| 0x008 | CYCLE_US | | 0x008 | PTP_NS (read) |
| 0x00C | GUARD_US | | 0x00C | PTP_SEC, low 32 bits (read) |
| 0x010 | TAQ_BASE | | | |
| 0x014 | STATUS (read) | | | |
| 0x100 + 4i | SCR[i] | | | |
| 0x200 + 4t | TQCR[t] | | | |
| 0x300 + 4p | PRIO_MAP[p]: [7:0] first queue, [15:8] count (0 counts as 1) | | | |

STATUS fields:

| bits | field |
|---|---|
| [31:30] | phase (0 RR, 1 LOAD, 2 SLOT, 3 FREE) |
| [29] | guardband active |
| [23:16] | entry index |
| [15:0] | µs left in the slot, or µs since the window began |

Mapping priorities: put the queues that will carry prioritised traffic
inside the group, at `TAQ_BASE .. TAQ_BASE+n-1`. Give each one a slot. Then
set `PRIO_MAP[p]` to queue `TAQ_BASE+p` with a count of 1, and have the
driver tag each frame with the priority the operating system's queue
discipline gave it. The example used for the evaluation had three priorities on
queues 20, 21 and 22:
* `TAQ_BASE = 20`, `SCR = {0, 1, 2}`;
* `TQCR = {90, 5, 5}`, `CYCLE_US = 100`, `GUARD_US = 1`.

## Top level (`tas_nic`)

The top has one clock and a synchronous reset. It has the parameters below:

| parameter | default |
|---|---|
| `NUM_PORTS` | 4 |
| `NUM_TXQ` | 32 |
| `NUM_TAQ` | 8 |
| `NUM_SLOTS` | 8 |
| `NUM_RXQ` | 4 |
| `TXQ_DEPTH` | 16 |
| `RXQ_DEPTH` | 16 |
| `RXBUF_WORDS` | 512 |

Every per-port signal is an unpacked array indexed by port. Every valid/ready
pair is a handshake that is taken when both are high at a clock edge.

The MAC/PCS and transceivers, the host memory and its DMA interconnect, and
the host CPU are outside the core. Their sides appear as ports:
* serializer and deserializer streams;
* `rd_req`/`rd_rsp` and `wr` memory ports;
* TX pointer push (with the frame's priority), free RX buffers, RX pointer
  pop and `irq`.

`wr_strb` is always all ones, because every write is a whole word.

## Where this design departs from, or adds to, the source description

The description gives the mechanisms: TQCR per queue with microsecond
granularity, SCRs for the loop order, registers on AXI, a guardband, idle
slots for empty queues, round-robin in free time, and one schedule per port
on PTP time. It does not give their encoding. These are this design's
choices:

* **Group and table encoding.** The group is a contiguous range of queues
  starting at `TAQ_BASE`. An SCR entry holds a group member number, and the
  TQCR is indexed by that member number. A queue may appear in several
  entries.
* **Window and guardband registers.** The window length (`CYCLE_US`) and the
  guardband length (`GUARD_US`) are registers. The guardband also applies at
  the end of free time.
* **Priority map in hardware.** The source maps priorities to queues with
  the operating system's queue discipline and says only that, given the
  priority, a TX FIFO is chosen round-robin. Here the host passes the
  priority with each pointer, and `PRIO_MAP` registers give each priority a
  range of queues. The range encoding and the strict rotation are this
  design's choices.
* **No descriptor rings.** Queues are on-chip pointer FIFOs rather than
  descriptor rings in host memory. There is no DMA engine. Memory is reached
  through simple one-word request ports.
* **RX choices.** RX queue selection is round-robin. There is one interrupt
  pulse per frame, with no interrupt moderation. The arrival time is stored
  as an extra word after the frame.
* **Not modelled.** Checksum offload beyond the Ethernet FCS, VLAN/priority
  parsing, and the RX-side queue mapping are not modelled.
* **Per-port queues.** The source describes a generic NIC in which the
  serializer, CRC and timestamp logic are replicated per port while "the
  management of FIFOs" is shared. It also says the time-aware solution "works
  independently for each available port". Here each port has its own TX and
  RX queue banks, which keeps the ports fully independent. A shared bank with
  a port field per queue would be the alternative.
* **Who pops the RX queues.** In the generic NIC described, the NIC pops RX
  pointers and interrupts the CPU. Here the receive engine raises the
  interrupt when it pushes the pointer, and the host pops the pointer through
  `rxq_pop_*`.
* **Sizes.** The queue counts, depths and buffer sizes are chosen to be
  small, not taken from a product. 32 TX queues stand in for the thousands a
  large NIC may have. Raise `NUM_TXQ`; the scheduler's round-robin search and
  the queue bank grow linearly.

## Simulating

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Build and run one of them with plain
Verilator:

```
verilator --binary --timing --timescale 1ns/1ps -Wno-fatal \
  --top-module tb_tas_scheduler -y rtl -y tb -Irtl \
  rtl/tas_pkg.sv tb/tb_tas_scheduler.sv
./obj_dir/Vtb_tas_scheduler
```

What each testbench covers:

* `tb_tas_scheduler` holds the scheduler against a cycle-independent model of
  the programmed table. It runs round-robin, the 90/5/5 split, the
  100 µs / 500 µs table with a skipped empty entry, and a table with no free
  time.
* `tb_tas_nic` runs the full core at its default parameters. It takes about
  20 s of wall time and simulates 600 µs.
  * All four ports are looped back TX into RX.
  * Port 0 runs the 90/5/5 experiment. Port 1 has free time and an always-empty
    slot, with frames corrupted on the wire. Port 2 runs out of RX buffers,
    and its priority 0 is spread over queues 0 to 2.
    Port 3 sees heavy serializer stalls.
  * It checks every frame, its FCS and its queue against the slot owner. It
    checks that no frame straddles a slot change, and the delivery to host
    memory.
  * It counts every mechanism and fails any that never happened: stalls,
    back-pressure, full queues, mode switches, guardband, idle slot, free-time
    frames, FCS extra beat, CRC drops, overflow drops, interrupts, pointers
    spread over the queues of one priority.
  * In that run queue 20 carried 95.7 % of port 0's bytes while queues 20 and
    22 were both backlogged. The expected value is 89 µs of usable slot
    against 4 µs for queue 22.
* `tb_tas_nic_linerate` also runs the full core at its defaults. It sends
  1500-byte frames on all four ports at once, with memory and serializer
  always ready, and measures 9.64 Gb/s per port at the nominal 156.25 MHz
  (the requirement is at least 9.5 Gb/s). Every frame's FCS and its return
  through RX are checked.
* The others test one block each against an independent model:
  `tb_tx_insert`, `tb_queue_bank`, `tb_tx_engine`, `tb_tx_fcs_ts`,
  `tb_rx_frame_buffer`, `tb_rx_engine`, `tb_ptp_clock`, `tb_tas_csr` and
  `tb_tas_pkg`.

The schedulers carry SystemVerilog assertions: a slot only grants its own
queue, and free time never grants a group queue. The register file asserts
that AXI responses hold until they are accepted. Build with `--assert` to
enable them.
