# A persistent CXL switch in SystemVerilog

With CXL memory pooling, persistent memory sits behind one or more CXL
switches. A write is durable only once it reaches the memory node, so every
persist barrier in a program (a cache-line flush followed by a fence) waits
for the whole round trip through the fabric. The idea implemented here is to
make the switch itself part of the persistence domain. The switch gets a
small **persist buffer (PB)**. A write that reaches the switch is stored
there and acknowledged at once, so the barrier completes after a single hop.
The buffered block is written back toward memory later, in the background.
Because the switch now holds the newest copy of some blocks, it also answers
reads for them and merges repeated writes to them.

Moving the point of persistence into the fabric brings three hazards, and
most of the logic exists to avoid them:

* a read must never return an older version than one that was already
  acknowledged;
* an older version must never overwrite a newer one further down the path;
* an entry may be released only when the next persistent structure holds
  its data.

This repository has the switch (`pcs`) and everything inside it: the
routing core, the selector that decides what the buffer handles, the buffer
controller and the buffer. Hosts, memory devices and the CXL physical layer
are outside it. The testbenches model them behaviourally.

## The packet and the ports

The switch carries CXL.mem messages whole, one per clock, as a 612-bit
`pcs_pkg::pkt_t`:

| field  | bits | content |
|--------|------|---------|
| `meta` | 54   | `spid` (12), `dpid` (12), `opcode` (4), `ld_id` (4), `tag` (16), reserved (6) |
| `addr` | 46   | 64-byte line address (physical address bits 51:6) |
| `data` | 512  | one cache block |

The 54/46/512 split is what a buffer entry stores, so a buffered write can
be rebuilt exactly. How the 54 metadata bits are divided among the fields is
this implementation's own choice. Opcodes: `OP_MEM_RD`, `OP_MEM_WR`,
`OP_WR_ACK`, `OP_RD_DATA`, `OP_DRAIN_PATH`, `OP_DRAIN_ACK`.

`pcs` has `NUM_PORTS` (16) valid/ready ports in each direction, each carrying
`pkt_t`. A packet is routed by its destination port ID (`dpid`) through a
4096-entry table that is written through `rt_we/rt_id/rt_port` before
traffic starts. A response is addressed back by swapping `spid` and `dpid`.
The outputs `stats` (ten 32-bit event counters), `pb_data_count` and
`drain_threshold` are for observation only. Reset (`rst_n`) is synchronous
and active low.

Default parameters are those of the evaluated configuration: 16 ports, 32
buffer entries and the adaptive drain threshold. Queue depths (8-entry
controller buffers, 4-entry generator queues) and the 8-entry Request Table
are this implementation's own sizes.

## Where the pieces sit

```
 ports 0..15 ──► pcs_control_logic ──► ports 0..15
                  │  round-robin, routing table, 1 packet/clock
                  │  pbcs: "does this packet belong to the PB?"
                  ▼ PB port (port 16)           ▲
                 pbc ───────────────────────────┘
                  ├─ Request Buffer / Response Buffer   (pbc_fifo)
                  ├─ free_pbe_check   room for a write?
                  ├─ update_read_pb_entry   central unit
                  ├─ persist_buffer   32 entries: data+meta / address / status+LRU
                  ├─ drain_threshold_check, drain_pb, drain_pb_entry
                  └─ request_generator, response_generator ──► PB port
```

The buffer controller (`pbc`) sits behind an extra, internal switch port.
Everything the buffer handles goes through that port, in both directions:
writes and reads routed to it, acknowledgments for its write-backs, the
early acknowledgments and read data it produces, and its write-backs.

## Life of a buffer entry

Every entry is in one of four states (2 bits):

```
        write placed           drain chosen             write-back leaves PB port
 Free ───────────────► Data ─────────────► Drain Issued ──────────────────────► Drain
  ▲                    ▲  ▲ (overwrite)          │ (overwrite: back to Data)      │
  │                    └──┴──────────────────────┘                                │
  └───────────── last write-back acknowledged by the next structure ──────────────┘
```

* **Data**: the entry holds the newest version. Nothing downstream has it
  yet.
* **Drain Issued**: a write-back has been built but has not left the PB
  port. Reads are still answered from the entry.
* **Drain**: the write-back is on its way. Reads now go to memory, because
  the write-back is ahead of them on the same path.
* **Free**: the entry can be reused.

A new write to a buffered line overwrites its entry in place (coalescing)
and puts it back to Data, whatever state it was in. An entry can therefore
have more than one write-back in flight. Each entry counts its
unacknowledged write-backs (3 bits). It becomes Free only when the last one
is acknowledged and it is not in Data. An entry whose count is at its
maximum is not chosen for another drain. This counter is not in the
original description, which frees an entry on "the" acknowledgment. Without
it, the acknowledgment of an old write-back would either free a newer copy
early or leak to the host as a stray acknowledgment. The end-to-end test
found exactly that case.

Each entry also has an LRU rank (5 bits for 32 entries). The ranks form a
permutation. A touched entry gets the top rank, and every entry above its
old rank moves down by one. Writes and read hits touch an entry.

## The selector (`pbcs`): keeping one place for the newest copy

The switch routes one packet per clock. The selector sees the chosen
packet's opcode, address and input port, and answers in the same clock
whether the packet goes to the PB port instead. It works from two tables:

* **Status Table copy**: address, state and write-back count of every
  buffer entry. The controller reports each state change in the clock it
  happens (`evt_*`), so the copy is never behind. This design checks this
  with an assertion that compares the two Data counts.
* **Request Table**: writes already routed to the controller but not yet
  placed in the buffer, one counter per address. A write is added when it is
  routed and removed when the controller reports it placed (`req_done`).

Rules, for packets from ordinary ports:

| packet     | goes to the controller when | otherwise |
|------------|-----------------------------|-----------|
| write A    | A is in either table (it must coalesce with the copy there). If A is only in the Request Table and its counter is full, the packet stalls. | If Data entries + writes in flight < entries and a Request Table slot is free, it goes to the controller. Otherwise it **bypasses** the buffer toward memory (a "write failure"). |
| read A     | A is Data or Drain Issued, or A is in the Request Table | normal routing to memory |
| write-ack A| A's entry has a write-back in flight | normal routing to the requester |
| DrainPath  | always | n/a |

Packets coming out of the PB port are never sent back into it. When a
write-back leaves the PB port, both the selector and the buffer move its
entry from Drain Issued to Drain in that clock.

The control logic serves the PB port first whenever its packet can move,
then takes the ordinary inputs in round-robin order. The pointer advances
even when the chosen packet is blocked, so one blocked output does not stop
the other ports. Draining first is this design's choice: a full buffer can
only empty through its own port.

## Inside the controller

Each clock, `update_read_pb_entry` takes one packet. It takes from the
Response Buffer (acknowledgments) first and from the Request Buffer
otherwise:

* **Acknowledgment**: the write-back count of its entry drops; the last one
  frees the entry.
* **Write**: allowed only when `free_pbe_check` says the line is already
  buffered or a Free entry exists. If so, the unit writes the entry (state
  Data, LRU touched), signals `req_done`, and hands an acknowledgment to the
  response generator. Otherwise the write waits at the head of the queue and
  a drain is requested. Holding it there, rather than taking it, keeps
  acknowledgments flowing, and those are what free entries.
* **Read**: a hit on any non-Free entry returns the buffered block. A miss
  is passed on toward memory unchanged.
* **DrainPath**: handed to `drain_pb`.

`drain_pb_entry` picks the Data entry with the lowest LRU rank. It skips
entries whose write-back count is full and the entry being written in that
clock. It marks the chosen entry Drain Issued and gives its address,
metadata and data to `request_generator`, which rebuilds the original write.
At most one drain starts per clock. Three sources can ask for one:

1. **Free PBE Check**: a write is waiting for room.
2. **Drain PB**: a DrainPath is emptying the buffer.
3. **Drain Threshold Check**: more Data entries than the threshold DT.

### Drain threshold

`DT_MODE` selects the scheme:

* **Eager**: DT = 0. Every block is written back at once.
* **Lazy**: DT = 75% of the entries (24). Blocks stay for later reads and
  coalescing.
* **Adaptive**: the default. DT starts at 50% (16) and moves by `C_STEP` (1)
  after every placed write: up while more than `P_PCT` (50%) of the entries
  are Free, down while fewer are. DT is clamped to 0..N-1.

The original description gives only "raise or lower DT by a constant C when
utilization/availability crosses a percentage P", so the values of C and P,
and the moment DT is updated, are this design's own.

### DrainPath

Before a process migrates to another host, the operating system makes the
root complex send a DrainPath to every memory device it maps. Each switch on
the way routes the DrainPath into its controller whatever its destination.
`drain_pb` holds it, keeps requesting drains until no Data entry is left,
and then releases it. It goes through the same generator queue as the
write-backs, behind them, so the memory device sees all write-backs before
the DrainPath. The device answers with a DrainAck.

## Timing

* A write into an idle switch is acknowledged two clocks after it is
  offered: one clock into the Request Buffer, one through the response
  generator queue.
* Routing takes one packet per clock across the whole switch. The selector's
  decision adds no cycle.
* The buffer, the Free PBE Check and the drain selection are combinational
  around registered state, so a write is placed, and a drain started, in the
  clock after its packet reaches the head of its queue.
* The 32-entry associative lookups (two in the buffer, two in the selector)
  and the LRU minimum search are the longest paths. No timing target was
  set.

## What is this design's own and what is not modelled

Following the original description: the block structure of the controller
and the selector, the four entry states and their meaning, the table widths
(64 B data, 54-bit metadata, 46-bit address, 2-bit status, 5-bit LRU), the
routing rules, the drain triggers, the eager, lazy and adaptive thresholds
with their 0/75/50% values, DrainPath handling, and the 16-port, 32-entry
size.

Own choices, also noted at the top of each file:

* whole-packet, one-per-clock switching with no flits, virtual channels or
  credit flow;
* the metadata field split;
* queue depths, the Request Table size (8 addresses, 4-bit counts) and a
  stall when it is full;
* the LRU counting rule and lowest-index Free entry allocation;
* write-back counting per entry, where the original frees on "the"
  acknowledgment and routes acknowledgments only to Drain entries;
* PB-port-first arbitration and round-robin output of the two generators;
* read hits also refresh LRU;
* the adaptive threshold's C, P and update instant;
* reading the bypass rule ("if the total exceeds the buffer") as counting
  the write being decided.

Not modelled: the CXL physical and link layers, power-loss backup of the
buffer (battery or non-volatile cells), the hosts and root complex, and the
memory devices. The buffer is flip-flops, and its contents are lost at
reset.

## Files

`rtl/` holds one module per file:

* `pcs_pkg.sv`
* `pcs.sv`
* `pcs_control_logic.sv`
* `pbcs.sv`
* `pbc.sv`
* `persist_buffer.sv`
* `pbc_fifo.sv`
* `free_pbe_check.sv`
* `update_read_pb_entry.sv`
* `drain_threshold_check.sv`
* `drain_pb.sv`
* `drain_pb_entry.sv`
* `request_generator.sv`
* `response_generator.sv`

`tb/` holds one self-checking testbench per module, named `tb_<module>.sv`,
plus `pm_model.sv`, a behavioural persistent-memory device.

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops. Each
also has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
  rtl/pcs_pkg.sv tb/tb_pcs.sv --top-module tb_pcs -o tb_pcs
./obj_dir/tb_pcs
```

Replace `tb_pcs` with any other testbench name.

`tb_pcs` runs the full-size switch with no parameter changes:

* eight hosts run flush bursts, fences and checked reads against eight
  memory models;
* the memory links stall periodically, so the buffer fills;
* the run ends with a DrainPath to every memory.

It checks:

* read data;
* the two-clock acknowledgment;
* that all memories hold the newest data after the DrainPath;
* that every mechanism occurred: early acknowledgment, bypass,
  coalescing, read hits, threshold drains, drains forced by a waiting write,
  acknowledgment handling, DrainPath, stalls, and the threshold moving both
  ways.

The run takes about a second of simulation after a short build.

The unit testbenches compare each block with a reference model kept in the
testbench:

* the buffer's full state each clock;
* the selector's routing decisions against its own copy of the tables;
* the controller end to end with a memory model, including stale-read and
  lost-write checks.

They run at reduced sizes (8 entries, 4 ports) to reach corner cases
quickly.

The widths above are tied to `pcs_pkg`. `PB_ENTRIES` can be changed freely
(the evaluated range was 4 to 128), and all counters scale with it.
