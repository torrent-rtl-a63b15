# Torrent: a distributed DMA that copies one buffer to many memories

A many-cluster chip often needs to copy the same data into several cluster
memories at once: a weight tile sent to every accelerator, a KV cache copied to
all attention engines. An AXI network on chip only knows point-to-point
writes. The usual ways out cost something. Issuing N separate copies spends N
times the source bandwidth. Multicast routers make every router and link
larger as the maximum destination count grows.

Torrent does it at the DMA level instead. Every cluster has a Torrent next to
its memory. For a point-to-multipoint copy, the destinations are set up as a
**chain**, a doubly linked list of Torrents:

- The source streams the data once, to the first destination.
- Each destination stores every beat in its own memory and, in the same
  cycle, forwards it to the next destination.
- Control messages run the other way along the chain.

This scheme is called **Chainwrite**. Everything on the wire is an ordinary
AXI write burst, so the NoC needs no changes. The number of destinations is
limited only by the task descriptor, not by router hardware.

This repository holds synthesizable SystemVerilog for the Torrent endpoint and
for a system top with twenty clusters. It also holds self-checking testbenches
for every block and for the whole system.

## The chain and its four phases

One copy ("task") involves an **initiator**, the Torrent whose core issued the
task, and one or more **followers**. For a Chainwrite, the initiator is the
head of the chain. The destinations, in the order the task lists them, form
the rest. Each node knows only three addresses: its previous hop, itself, and
its next hop. The task runs in four phases:

1. **cfg dispatch.** The initiator sends every destination its configuration
   packet (cfg). Each cfg goes out as one AXI burst to that destination's cfg
   window.
2. **Grant, backwards.** The tail's role is decided by its cfg having no next
   hop. As soon as the tail has its cfg, it starts its write engine and sends
   a Grant to its previous hop. A middle node forwards the Grant only once it
   has its own cfg and has received the Grant from its successor. Forwarding
   the Grant means it is ready: its write engine and forwarding path are
   armed. When the Grant reaches the head, every node in the chain can
   accept data.
3. **Data, forwards.** The head's read engine streams the source buffer to the
   first hop. Each middle node's data switch duplicates every incoming beat:
   one copy goes to its own write engine, the other to its backend, which
   sends it on to the next hop. The tail only stores.
4. **Finish, backwards.** The tail sends Finish once its last word is in
   memory. A middle node forwards Finish once it has received one, stored all
   its data and sent all of it on. When Finish reaches the head, the task is
   complete. The head then pulses `task_done_o`, and `cycles_o` holds the
   task's latency in cycles.

Because the Grant travels back through every node, data never enter a node
that is not set up. Because Finish travels back through every node, the head
knows when all copies are in place.

The controller's state names come from the published sequence charts:

| Role | States |
|---|---|
| initiator / head | `SEND_CFG`, `WAIT_GRANT`, `RECV_GRANT`, `SEND_DATA`, `WAIT_FINISH`, `RECV_FINISH` |
| tail | `RECV_CFG`, `SEND_GRANT`, `WAIT_DATA`, `RECV_DATA`, `SEND_FINISH` |
| middle node | `RECV_FWD_GRANT`, `RECV_FWD_DATA`, `RECV_FWD_FINISH`, plus the `WAIT_*` states it shares with the head |
| local copy | `LOCAL_COPY` |

The published charts show the sequence of these states, not a state diagram.
The transitions in `torrent_ctrl.sv` were written from the description of the
phases above.

### The same protocol for P2P copies

The four phases also run point-to-point tasks:

- **P2P write.** A chain of length one.
- **P2P read.** The initiator sends a read-type cfg to the remote Torrent,
  which becomes the chain's head and data source. The initiator itself is the
  tail: it grants, stores and finishes.
- **Local copy.** Source and destination are in the same memory. The copy
  runs inside one Torrent, with no messages. It can also reorder data between
  two access patterns, so it doubles as a data-layout engine.

### The cfg packet

A cfg carries six fields:

| Field | Content |
|---|---|
| A | task id |
| B | address of the previous hop |
| C | address of this hop |
| D | address of the next hop |
| E | total size in bytes |
| F | the access pattern this node's streaming engine will use |

A missing neighbour (the head's previous hop, the tail's next hop) is all
ones. The packet is cut into frames of `FRAME_BODY_W` bits, one frame per
512-bit AXI beat, so the same controller works with narrower interconnects:

```
 bit 511        510 .. 503          502 .. FRAME_BODY_W   FRAME_BODY_W-1 .. 0
 +------+--------------------------+--------------------+---------------------+
 | type |     frame identifier     |      zero pad      |      frame body     |
 +------+--------------------------+--------------------+---------------------+
 type: 0 = write request, 1 = read request
 frame identifier: in frame 0, the number of frames; in frame k > 0, k
```

With the default `FRAME_BODY_W = 503`, a cfg (320 bits) fits in one frame.
The end-to-end test uses 200-bit bodies, so every cfg takes two frames and the
reassembly path is exercised.

### Message encoding and address map

Grant and Finish are single-beat writes that carry the task id. Each Torrent's
AXI slave decodes the kind of an incoming write from its address:

```
 addr[31:16]  node index (cluster i answers at i << 16)
 addr[15:14]  kind: 0 cfg, 1 Grant, 2 Finish, 3 data
 addr[13:0]   offset, advanced by data bursts, wraps
```

The receiver places data by its own access pattern (field F), not by the AXI
address. So the offset only keeps successive bursts distinct.

### Flow control between tasks

The published design lets a middle node forward the Grant only "when it is
ready for this new Chainwrite task". Here that rule is enforced at the AXI
level:

- A Torrent's slave refuses the address phase of a cfg write while its
  controller is busy. The initiator's cfg burst then waits in the network
  until the follower is free, and with it the Grant that would start the
  data.
- A Torrent that has a cfg arriving will not accept a task from its own core
  in the same cycle, so it cannot start a new task of its own ahead of the
  arriving cfg.

The end-to-end test runs two overlapping tasks that share a destination and
checks that this happens.

Known limit: cfgs are not queued. Suppose two Torrents are each busy with a
task that needs the other, and each waits for the other to accept a cfg. They
wait forever. The software that issues tasks has to avoid such cycles.

## Inside one Torrent

```
        cluster memory (32 banks x 64 bit)
          |  8 read ports          ^ 8 write ports
          v                        |
   +--------------+         +--------------+
   | DSE (R)      |         | DSE (W)      |
   | AGU, 8 FIFOs,|         | splitter,    |
   | packer       |         | 8 FIFOs, AGU |
   +------+-------+         +------^-------+
          | port 1                 | port 3
   +------v------------------------+-------+
   |            data switch                |
   |  DeMux (port 1), Duplicate (port 4),  |
   |  Mux -> port 2, Mux -> port 3         |
   +------+------------------------^-------+
          | port 2                 | port 4
   +------v-------+         +------+-------+        +-------------+
   | Stream2AXI   |-------->| AXI master   |<------>|  controller |
   +--------------+ msgs -->|              |        | (4 phases)  |
                            | AXI2Stream   |------->|             |
                            +--------------+ cfg,   +-------------+
                                             Grant, Finish
```

### Streaming engines (`torrent_dse_rd`, `torrent_dse_wr`, `torrent_agu`)

A 512-bit beat is made of eight 64-bit words, one per memory channel. For beat
number j, the AGU produces a base address from four nested loops:

```
base_j = base + i0*tstride[0] + i1*tstride[1] + i2*tstride[2] + i3*tstride[3]
```

Here `i_d` runs over `bound[d]`, with dimension 0 innermost. Channel c then
uses `base_j + c * sstride`. With `sstride = 8` and `tstride[0] = 64`, a beat
is 64 contiguous bytes. Other values produce strided tiles, transposes and
similar layout changes.

The AGU keeps one running address per loop level, so it needs only adders.

- **Read engine.** Issues one request per channel per beat. A channel only
  issues when its FIFO has room for the reply, so backpressure from the NoC
  never loses data. A beat leaves the packer when all eight FIFOs have their
  word.
- **Write engine.** The splitter does the reverse: it takes a beat when all
  eight FIFOs have room. The channels then write independently.
- **Bank conflicts.** These stall single channels, not the whole beat.

With a memory that grants every request, both engines run at one beat, 64
bytes, per cycle.

### Data switch (`torrent_data_switch`, `torrent_stream_dup`)

Ports are numbered as in the published figure:

| Mode | Route | Used by |
|---|---|---|
| Local | 1 -> 3 | local copy |
| Read | 1 -> 2 | the data source (head of a chain, or the remote side of a P2P read) |
| Write | 4 -> 3 | the tail |
| Chainwrite | 4 -> 2 and 3 | a middle node |

The Duplicate unit forks one valid/ready stream into two. A beat is released
upstream only when every enabled output has taken it. Two flags (`c0_q`,
`c1_q`) remember which output already took the current beat, so a fast output
never gets the same beat twice while the slow one catches up. No data are
stored.

An optional ChainWrite buffer (`CW_BUF_DEPTH > 0`) can sit on the forwarding
output. It decouples a node's local write from stalls further down the chain.
It is off by default.

### Backend (`torrent_backend`, `torrent_stream2axi`, `torrent_axi2stream`)

**Outgoing side.** Stream2AXI cuts the outgoing stream into bursts of up to
`BURST_BEATS` beats. It issues an address only once the burst's first beat is
available, so it never holds the bus waiting for data. Controller messages
(cfg bursts, Grant, Finish) share the same AXI master port. A message waits
for the end of the current data burst, and a data burst waits while a
message is in flight.

**Incoming side.** AXI2Stream accepts one write at a time and routes it by
kind:

- cfg beats go to the controller;
- Grant and Finish become one-cycle pulses;
- data beats go to switch port 4.

Each write is answered with one B response (OKAY) after its last beat.

## The system top (`torrent_soc`)

The top has twenty clusters, as in the 4 x 5 mesh the design was evaluated on.
Each cluster has a 1 MB memory of 32 banks x 64 bit (`cluster_mem`, built from
`mem_bank` arrays) and one Torrent. Each memory has 17 ports:

- 8 for the Torrent's read engine;
- 8 for its write engine;
- 1 external port, standing in for the cores and accelerators.

Arbitration is round-robin per bank, and reads return one cycle after the
grant.

Each Torrent's AXI master and slave, its task port and the memory's external
port are ports of the top. The network on chip is not part of this design, so
the testbenches connect the AXI ports with a behavioural crossbar
(`tb/noc_model.sv`). This crossbar routes by `addr[31:16]`, keeps each burst
together, and returns B responses by id.

## Measured behaviour

The numbers below come from the full-size testbench: the top at its default
parameters, a crossbar with no added hop latency, and memories that see no
other traffic.

| Chainwrite of 64 KB to | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 destinations |
|---|---|---|---|---|---|---|---|---|
| cycles | 1167 | 1239 | 1311 | 1383 | 1455 | 1527 | 1599 | 1671 |

64 KB is 1024 beats. Inside a burst, data moves at one beat per cycle. Each
16-beat AXI burst costs about one idle cycle at the sender, for its AW, and one
at the receiver, for its B. That is about 12% of a point-to-point copy.

Each additional destination adds 72 cycles at this size. That cost is:

- the extra cfg burst;
- the Grant and Finish passing through one more node;
- one more store-and-forward stage in the pipeline;
- about one idle cycle per burst.

The per-burst idle cycles add up along the chain, so the cost per destination
grows with the transfer size: roughly 8 cycles plus one cycle per 16 beats. A
two-entry ChainWrite buffer does not change this, so slack on the forward
path is not what limits it.
A 128 KB copy took 2319, 2455 and 2727 cycles to 1, 2 and 4
destinations.

The published measurement of the 64 KB experiment, on a mesh NoC, reports
about 1130 cycles for one destination and 82 cycles per extra destination.
Those numbers depend on the network, which is modelled only roughly here.
Overlapping each burst's AW and B with the neighbouring bursts' data is the
obvious next step for removing the size-dependent part.

### Layout changes while multicasting

`tb_deepseek_layouts` moves the attention-layer operands of a large language
model between tiled layouts. It uses 9 clusters, 256 rows, and 8-bit elements.

A layout `MNMaNb` is read as follows:

- the matrix is cut into `a x b` tiles;
- the tiles are stored one row of tiles after another;
- each tile is stored row-major.

With 8-bit elements, one 8-element tile row is one 64-bit memory word.

Going from `MNM16N8` to `MNM8N8` uses these patterns:

- **Destination.** Written linearly. Each beat is one 8 x 8 tile.
- **Source.** Read with `sstride = 8`. The three loop levels are:
  - tile column, stride 128;
  - upper or lower half of a 16-row tile, stride 64;
  - row of tiles, stride `N/8 * 128`.

Going from `MNM16N8` to `MNM64N16` is harder:

- **Source.** One beat is eight rows of one 16 x 8 tile.
- **Destination.** Written with `sstride = 16`, since rows are 16 bytes
  apart. Its four loop levels are:
  - 8-row group inside the 64-row tile, stride 128;
  - which half of the 16-wide row, stride 8;
  - 16-wide tile column, stride 1024;
  - 64-row band.

Both sides use the same number of beats in the same order. Every word is
checked against the two layouts' address formulas.

| Operand | Size | Layout change | Destinations | Cycles |
|---|---|---|---|---|
| Q K^T (prefill) | 256 x 192 | MNM16N8 to MNM8N8 | 8 | 1271 |
| S V (prefill) | 256 x 128 | MNM16N8 to MNM8N8 | 8 | 871 |
| K V | 256 x 512 | none | 8 | 3271 |
| Q K^T (decode) | 256 x 192 | MNM16N8 to MNM64N16 | 1 | 879 |
| S V (decode) | 256 x 128 | MNM16N8 to MNM64N16 | 1 | 591 |

## Where this RTL departs from, or adds to, the published design

- **Widths and encodings.** The published design gives the fields, not their
  widths. All widths, the frame bit positions, the address map and the message
  encoding are this implementation's choices (see `torrent_pkg.sv`).
- **One AXI port for messages.** cfgs go out one after another over the single
  AXI master port. The published text says cfgs are sent "in parallel". Here
  they are issued back to back, one burst per destination.
- **P2P read.** The read protocol (read-type cfg, remote head, local tail) is
  this implementation's reading of the "read/write request" type bit.
- **Reduced AXI.** AXI is reduced to the write channels with INCR bursts of
  full-width beats. Only writes are needed, because the source always pushes.
- **The Duplicate inset.** The Duplicate unit was written from its described
  function and the signal names in the published inset, not from the gates
  drawn there.
- **Not built.** The NoC, the cores, the accelerator, the global memory of the
  ASIC study and the destination-ordering software (greedy and TSP
  scheduling) are not part of this RTL. The chain order is whatever order the
  task descriptor lists.
- **Hardware vs software.** `cycles_o`, the per-task latency counter, and
  the task descriptor port (`task_desc_t`) stand in for the
  software-programmed registers of the real design.
- **Limits.** A task names at most `MAX_DST = 16` destinations, the largest
  size in the published area sweep. The 8 x 8 mesh study with up to 63
  destinations would need `MAX_DST = 63`.

## Parameters

| Where | Parameter | Default | Meaning |
|---|---|---|---|
| `torrent_pkg` | `DATA_W`, `BANK_W` | 512, 64 | beat width (64 B per cycle), memory word |
| | `NDIM` | 4 | loop dimensions of the AGU |
| | `MAX_DST` | 16 | destinations per task |
| | `MADDR_W` | 20 | byte address inside a 1 MB memory |
| `torrent_soc` | `NUM_CLUSTERS` | 20 | clusters |
| | `MEM_BYTES`, `NBANK` | 1048576, 32 | memory per cluster |
| `torrent`, `torrent_soc` | `FIFO_DEPTH` | 4 | per-channel FIFOs of both engines |
| | `BURST_BEATS` | 16 | longest AXI data burst |
| | `CW_BUF_DEPTH` | 0 | optional ChainWrite buffer |
| | `FRAME_BODY_W` | 503 | cfg frame body bits |

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself.
Each also has a watchdog that counts a failure if the test hangs. With
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/torrent_pkg.sv tb/tb_torrent_soc.sv --top-module tb_torrent_soc
./obj_dir/Vtb_torrent_soc
```

| Testbench | What it exercises |
|---|---|
| `tb_stream_fifo`, `tb_cluster_mem`, `tb_torrent_agu` | FIFO order and full/empty behaviour; bank arbitration and read latency; address sequences |
| `tb_torrent_dse_rd`, `tb_torrent_dse_wr` | both engines against a randomly stalling memory, with linear, 2-D and 3-D patterns and the one-beat-per-cycle rate |
| `tb_torrent_stream_dup`, `tb_torrent_data_switch` | all four switch modes, random backpressure, and the optional buffer |
| `tb_torrent_stream2axi`, `tb_torrent_axi2stream`, `tb_torrent_backend` | burst cutting, WLAST, message/data sharing of the port, kind decoding, cfg hold-back |
| `tb_torrent_ctrl` | every role of the four-phase protocol against a scripted peer |
| `tb_torrent` | two Torrents back to back: local copy, P2P write and read |
| `tb_torrent_soc` | five clusters end to end (details below) |
| `tb_deepseek_layouts` | tiled-layout changes combined with 8-way Chainwrite, 9 clusters |
| `tb_torrent_soc_full` | the default-size system, 64 KB Chainwrite to 1-8 destinations, about a minute of simulation |

`tb_torrent_soc` runs local copy, P2P write and read, a 4-destination
Chainwrite with a different pattern per destination, and two concurrent
tasks. It counts every mechanism at least once: multi-frame cfg, forwarded
Grant, data and Finish, cfg held back, bank conflicts, multi-burst transfers,
and every switch mode.

Memories that are read before they are written are initialised by the
testbenches. Anything left uninitialised should be treated as random.
