# TeraPool shared-L1 cluster in SystemVerilog

TeraPool is a cluster of 1024 small RISC-V cores that all share one 4 MiB L1
scratchpad memory. The memory is split into 4096 single-port banks of 1 KiB.
Any core can load or store any word of it, with no caches and no coherence
traffic. The latency depends only on how far away the bank is: 1 cycle inside
the core's own Tile, 3 cycles inside its SubGroup, 5 cycles inside its Group,
and 7, 9 or 11 cycles to another Group (a build-time choice; 9 is the default).
A DMA engine with one backend per SubGroup moves data between the L1 and an
external main memory over sixteen 512-bit AXI masters.

This repository models that memory system at register-transfer level:

* the banks;
* the four-level crossbar hierarchy with its pipeline registers;
* the cores' load/store transaction tables;
* the hybrid sequential/interleaved address map;
* the three-part DMA (frontend, midend and sixteen backends).

The cores themselves are not modelled. Each core is a load/store port on the
top-level module, and testbenches drive those ports. Every RTL module has its
own self-checking testbench. One top-level testbench runs the whole design end
to end with a reduced number of Tiles.

```
terapool                     top: cluster + DMA frontend/midend
 ├─ dma_frontend             register interface (SRC/DST/SIZE/LAUNCH/DONE/BUSY)
 ├─ dma_midend               split at 1 KiB SubGroup rows, distribute to 16 backends
 └─ terapool_cluster         4 Groups + 12 inter-Group 32x32 crossbars (x2: req/resp)
     └─ terapool_group       4 SubGroups + 12 inter-SubGroup 8x8 crossbars (x2)
         └─ terapool_subgroup  8 Tiles + SubGroup 8x8 crossbar (x2) + dma_backend
             └─ terapool_tile  8 core ports, 32 banks, local/remote crossbars
                 ├─ lsu_ttable (x8)  outstanding-transaction table + scoreboard
                 └─ spm_bank  (x32)  256 x 32 bit, 1-cycle read
shared helpers: stream_xbar, rr_arbiter, spill_register, spill_chain,
                stream_fifo, addr_scrambler, terapool_pkg
```

All parameters default to the published configuration: 4 Groups × 4 SubGroups ×
8 Tiles × 8 cores, a banking factor of 4, 1 KiB banks, 8 outstanding
transactions per core, a 512 KiB sequential region, 512-bit AXI and a 9-cycle
remote-Group latency. The testbenches override only the hierarchy counts, to
keep simulation short.

## 1. Address map

The L1 occupies byte addresses `[0, 4 MiB)`. Main memory (L2) starts at
`0x8000_0000`. The bit layout of an L1 word address is this design's choice; the
published description gives only the sizes.

```
 21        14 13  12 11  10 9    7 6     2 1  0
+------------+------+------+------+-------+----+
|   row      |group | sub  | tile | bank  |byte|     (after scrambling)
+------------+------+------+------+-------+----+
```

Consecutive words therefore walk across all 32 banks of a Tile, then across
Tiles, SubGroups and Groups, before the row changes. This is the *interleaved*
mapping. It spreads a streaming access over all 4096 banks and keeps conflicts
rare.

The lowest 512 KiB is the *sequential region*. There, each Tile owns a
contiguous 4 KiB block that lies entirely in its own banks, so a core can keep
its stack and private data at 1-cycle latency. `addr_scrambler` implements
this with wire crossings and one multiplexer:

* An address in the sequential region has the form
  `{tile_global[6:0], seq_row[4:0], bank[4:0], byte[1:0]}`.
* The scrambler swaps the 7 Tile bits with the 5 low row bits.
* The result is an interleaved-layout address whose row is below 32 and whose
  Tile field is the owning Tile.

All later routing uses only the scrambled address. The scrambler sits at every
place where an address enters the L1: the core ports in each Tile and the DMA
backends.

## 2. The L1 interconnect

This is the largest and hardest part of the design. It has to:

* keep 1024 initiators and 4096 targets fully connected;
* give each hierarchy level its exact round-trip latency;
* never lose or duplicate a transaction under back-pressure.

### 2.1 Transactions and handshakes

Every channel is a valid/ready stream. A request (`tcdm_req_t`) carries:

* the address, write enable, byte enables and write data;
* the issuing core's global 10-bit id;
* a 3-bit transaction id.

Every request, load or store, receives exactly one response (`tcdm_resp_t`).
The response carries the read data, a write flag, the core id and the
transaction id. Requests are routed by the address. Responses are routed back
by the core id, level by level, over a response network that mirrors the
request network.

`stream_xbar` is the crossbar used at every level. It is a demultiplexer per
input plus a round-robin arbiter (`rr_arbiter`) per output. It is fully
combinational: a granted request passes in the same cycle. The published design
builds it as a logarithmic tree of 2:1 stages; the flat form here has the same
behaviour.

`spill_register` is the pipeline register used everywhere. It is a two-slot
elastic buffer that registers both valid/data and ready, so chains of them
cut every combinational path and still pass one item per cycle.

### 2.2 Tile (`terapool_tile`)

A Tile has 8 core ports and 32 banks, plus 7 remote master ports and 7 remote
slave ports. The remote ports are numbered as follows:

| port | reaches |
|------|---------|
| 0 | the other Tiles of the same SubGroup |
| 1..3 | the SubGroup at offset 1..3 (mod 4) in the same Group |
| 4..6 | the Group at offset 1..3 (mod 4) |

A request leaves on master port *p* of the issuing Tile. It arrives on slave
port *p* of the target Tile and returns the same way.

A core request is handled in this order:

1. It passes through the core's `lsu_ttable`, which gives it a transaction id.
2. The scrambler maps its address.
3. A decoder compares the Group/SubGroup/Tile bits with the Tile's own position
   (given as input ports) and sends the request either to the *local crossbar*
   or to the *remote request crossbar*, which picks a master port.
4. The local crossbar is a (8 cores + 7 slave ports) × 32 banks crossbar. A
   request wins its bank's round-robin arbiter and reads or writes the bank.
   Data returns on the next clock edge.

Two details make this loss-free without stalling the banks:

* **Credits.** Each initiator of the local crossbar has a 2-entry response
  FIFO: every core, and every slave port. A request may only reach a bank if
  its initiator's FIFO has room, counting responses already in flight. A bank
  therefore never has to hold read data while waiting for a ready signal.
* **Response merging.** A core can receive a local response and a remote
  response in the same cycle. A 2:1 round-robin arbiter per core picks one; the
  other stays in its FIFO or spill register. The transaction table always
  accepts responses.

A **wide DMA port** lets the SubGroup's DMA backend read or write one 512-bit
beat per cycle. One beat is 16 neighbouring banks of one row. A bank used by
the DMA in a cycle grants no core or remote request in that cycle. The DMA
therefore has priority and never stalls, and cores retry in the next cycle.

**Pipelining.** The Tile has a spill register on every outgoing master request
and on every outgoing slave response, so request and response each cross one
register at the Tile edge. Together with the one-cycle SRAM this gives:

* 1 cycle inside the Tile;
* 3 cycles to another Tile of the same SubGroup (through the SubGroup
  crossbar).

### 2.3 SubGroup (`terapool_subgroup`)

The SubGroup has:

* 8 Tiles;
* one 8×8 request crossbar and one 8×8 response crossbar for port 0;
* the SubGroup's DMA backend.

Ports 1..6 of every Tile are passed up to the Group. The SubGroup crossbars add
no registers. Their round trip is 3 cycles: Tile master register, crossbar,
bank, Tile slave response register, crossbar back.

### 2.4 Group (`terapool_group`)

The Group connects 4 SubGroups. For each ordered pair (source SubGroup *s*,
offset *d*) there is one 8×8 request crossbar and one response crossbar. That
makes 12 of each: they connect port *d* of the Tiles in *s* with slave port *d*
of the Tiles in SubGroup (*s*+*d*) mod 4. A spill register after each crossbar
output, on the request and on the response path, gives the 5-cycle round trip.
Ports 4..6 are passed up to the Cluster.

### 2.5 Cluster (`terapool_cluster`) and the latency choice

The Cluster connects 4 Groups with 12 ordered-pair crossbars per direction.
Each crossbar is 32×32, one lane per Tile of a Group. The request crossbar is
selected by the target's {SubGroup, Tile} bits; the response crossbar by the
core id.

The remote-Group latency is the design's main physical-design knob. Extra
register stages shorten the long inter-Group wires, so the cluster closes
timing at a higher clock, at the cost of latency. `RemoteGroupLatency` selects
7, 9 or 11 cycles. The registers are spill chains before and after each
inter-Group crossbar:

| latency | request before / after crossbar | response before / after crossbar |
|---------|------------------------------|-------------------------------|
| 7  | 0 / 2 | 1 / 1 |
| 9  | 0 / 3 | 2 / 1 |
| 11 | 1 / 3 | 2 / 2 |

In addition, each direction passes the Tiles' own spill registers. The
published design places the extra registers at specific hierarchy boundaries:

* the Cluster slave ports for 7;
* the Group slave ports for 9;
* the Group master ports for 11.

Only their number matters for function and latency, so this design keeps them
all inside the Cluster module. Measured round trips are 1/3/5/9 cycles at the
default setting, and the cluster testbench checks them.

### 2.6 Transaction table (`lsu_ttable`)

Between each core port and the interconnect sits the table of the core's
outstanding transactions:

* It has 8 entries. A new request takes the lowest free entry, and the entry
  index becomes the transaction id.
* Responses may return in any order: a local response can overtake a remote
  one. The entry indicated by the id is freed when its response arrives.
* The load's data is delivered to its destination register at that moment.
* A 32-bit scoreboard (`core_pending_o`) marks registers with a load in flight.
* A load whose destination register already has a load pending is held until
  that load has returned, so two writes to the same register cannot be
  reordered.
* The table signals `full_o` and stops accepting requests when all 8 entries
  are in use.

## 3. DMA and the main-memory link

The DMA follows the three-part split of the published design.

**Frontend (`dma_frontend`).** A small register port (brought out of the top
as `dma_cfg_*`):

| offset | register | notes |
|--------|----------|-------|
| `0x00` | SRC | source address |
| `0x04` | DST | destination address |
| `0x08` | NUM_BYTES | transfer size |
| `0x0C` | LAUNCH | write starts the transfer; read returns the id the next launch will get |
| `0x10` | DONE | number of completed transfers |
| `0x14` | BUSY | busy flag |

A write to LAUNCH while a transfer is running is held (ready low) until the
midend can take it. Software therefore never loses a launch.

**Midend (`dma_midend`).** Splits a transfer into pieces that never cross a
1 KiB *SubGroup row*. In the interleaved map, 1 KiB is 8 Tiles × 32 banks × 4
bytes, the largest contiguous block that lies in one SubGroup. 1 KiB is also
256 words, the longest AXI burst a SubGroup's master issues. Each piece goes to
the backend of the SubGroup that owns its L1 bytes. Pieces for different
SubGroups are issued back to back, so up to 16 backends work in parallel. The
transfer completes when all its pieces have reported done. The L1 side is
recognised by its address being below 4 MiB, and either direction is allowed.

**Backend (`dma_backend`, one per SubGroup).** Moves one piece as one AXI INCR
burst of 512-bit beats, one beat per cycle:

* **L2 → L1:** it issues AR and writes each R beat directly into one Tile row
  through the Tile's wide DMA port.
* **L1 → L2:** it issues AW and reads beats from the Tiles (one-cycle latency)
  into a 2-entry FIFO that feeds W without bubbles. It then waits for B.

Each beat's L1 address goes through the same scrambler, so DMA transfers into
the sequential region also land in the owning Tile.

The top-level `axi_*` ports are the 16 backend masters. The main memory itself
(HBM2E with its controller in the published system) is represented in
simulation by a behavioural AXI memory with a fixed latency and random stalls
(`tb/axi_mem_model.sv`).

## 4. Verification

Each testbench is self-checking. Each one:

* uses random stimulus from `$urandom`;
* has a watchdog;
* checks cycle counts, not just data;
* ends with a line `TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|-----------|----------------|
| `tb_spm_bank` | read-after-write, byte enables, 1-cycle latency, against a reference array |
| `tb_spill_register` | ordering and no loss under random back-pressure, 1 item/cycle throughput, 1-cycle latency |
| `tb_stream_xbar` | routing, round-robin fairness, hold under back-pressure |
| `tb_addr_scrambler` | swap of the sequential region, identity above it, bijectivity |
| `tb_lsu_ttable` | out-of-order retirement, id reuse, 8-entry limit, scoreboard, same-register load hold |
| `tb_terapool_tile` | local/remote routing and port choice, 1-cycle local latency, bank conflicts, DMA priority, response collisions |
| `tb_terapool_subgroup` | 8-Tile traffic, 1 and 3 cycle latencies, one DMA piece through the AXI model |
| `tb_terapool_group` | 1/3/5 cycle latencies, DMA into a chosen SubGroup |
| `tb_terapool_cluster` | 1/3/5/9 cycle latencies with random traffic at all levels |
| `tb_dma_frontend` | register map, launch hold while busy, done counting |
| `tb_dma_midend` | 1 KiB splitting, owner SubGroup of each piece, parallel backends |
| `tb_dma_backend` | both directions over a full SubGroup, one beat per cycle |
| `tb_terapool` | whole top with a reduced hierarchy, end to end (below) |

The end-to-end test `tb_terapool` instantiates the top with two Groups, two
SubGroups and two Tiles: 64 core ports, 256 banks and 4 AXI ports. Every
inner size keeps its default (8 cores and 32 banks per Tile, 1 KiB banks,
8-entry tables, 9-cycle remote-Group latency). This is the largest
configuration simulated end to end. A verilator build of the full 1024-port
top did not finish compiling within ten minutes. The full configuration is
still elaborated and linted, and the Cluster's 32×32 crossbars are the same
code as the smaller ones. Sizes in the test are in L1 rows (one word in every
bank), and it runs in this order:

1. Load 16 rows from main memory into the interleaved L1 with one DMA
   transfer. A second launch is issued while the first transfer runs and must
   be held.
2. Meanwhile, random loads and stores from all ports (a behavioural core
   driver) run against a reference model. They cover all four distance levels
   and the sequential region. For one phase every core stores every cycle to
   far words, so that transaction tables fill.
3. Copy 4 rows that the cores wrote out to main memory, and compare them with
   the driver's reference.
4. Read the DMA'd data back through the cores with 2048 probe loads.
5. Send the 16 rows back to main memory and compare the round trip.

The test counts each mechanism it depends on:

* all four latency levels;
* sequential-region accesses;
* bank-conflict stalls;
* full transaction tables;
* DMA priority at a bank;
* response collisions;
* the held launch;
* parallel backends.

A mechanism that never happened fails the test.

To run a testbench with plain verilator:

```
verilator --binary --timing -Irtl -Itb --top-module tb_terapool \
  rtl/terapool_pkg.sv rtl/*.sv tb/tb_terapool.sv tb/tb_core_driver.sv tb/axi_mem_model.sv
./obj_dir/Vtb_terapool
```

Each module also has a deliberately broken copy. The matching testbench was run
against it to show that it notices the fault. For example, a response path one
register short is caught by the latency check, and a DMA split at 2 KiB by the
owner check.

Modelling notes:

* `rr_arbiter` leaves part of an internal candidate vector unused.
* The Tile's `NumSlots` is a derived value kept for readability.
* Some unconnected outputs (`full_o`, FIFO `ready_o`) are deliberate. The
  module headers explain these.

## 5. Workload fit

The cores are not built, so no kernel runs here. What can be checked is
whether the data of each workload fits in the 4 MiB L1 and moves through the
DMA.

| workload | fits? | arithmetic |
|----------|-------|------------|
| AXPY, DOTP | yes | sizes not given; up to 3.5 MiB / 8 B = 448 Ki f32 element pairs in the interleaved region |
| GEMM (tiled) | yes | 8 MiB matrices stay in main memory (published setup); three 512×512 f32 tiles need 3 MiB |
| 64 × 4096-point FFT | yes | published size; 64 × 4096 × 4 B = 1 MiB at f16 complex, 2 MiB at f32 complex |
| SpMMadd | unknown | no size or density published |
| 4 MiB L1 ↔ main memory | yes | 4096 bursts of 1 KiB over 16 backends, about 4096 beat-cycles each |

The FFT and GEMM matrix sizes come from the published evaluation. The other
sizes are this design's own estimates.

## 6. What is not modelled, and differences from the published design

Not modelled:

* The Snitch cores, their integer (Xpulpimg) and floating-point units, the
  shared divide/square-root units, and the L0 and L1 instruction caches. Their
  internals are not described, or they only serve the cores.
* The per-Tile AXI ports, the SubGroup AXI trees and the system demultiplexer
  to peripherals. The DMA backends' AXI masters are brought out directly
  instead.
* The HBM2E main memory and its controller, including the interleaving of
  main memory across channels in blocks of 256 words, which matches one DMA
  burst.
* Clock gating of the banks, and all physical-design aspects (floorplan,
  channels, wire delays).

Differences in the parts that are modelled:

* The crossbars are flat demultiplexer/arbiter structures, not logarithmic
  2:1 trees. They behave the same but would have different timing.
* The Tile omits the spill register on the incoming slave request. The
  published 3-cycle SubGroup latency leaves room for only one register per
  direction given a one-cycle bank.
* The extra registers of the 7/9/11-cycle configurations all live in the
  Cluster module, rather than at the Group and Cluster port boundaries. The
  latency is identical.
* DMA access to the banks uses a dedicated wide port with priority. The
  published text does not say how the backends reach the banks.
* The DMA register map, the address bit layout, the 64-byte alignment
  requirement of DMA transfers and the single AXI ID are this design's
  choices.
