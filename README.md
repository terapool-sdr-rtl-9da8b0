# A 1024-core shared-L1 memory cluster: hierarchical TCDM interconnect

The main idea of this design is that 1024 small cores share one 4 MiB
scratchpad, split into 4096 banks of 1 KiB, and that every core can reach every
bank with a plain load or store. No core has a private data memory; there are
no caches to keep coherent. The price is distance: a full 1024 x 4096 crossbar
cannot be built, so the interconnect is a tree of smaller crossbars, and a
request takes longer the farther its bank is from the core. The cluster is named
after its latencies, "1-3-5-X": 1 cycle to a bank in the core's own Tile, 3 to a
bank in its SubGroup, 5 to a bank in its Group and X (5, 7, 9 or 11) to a bank in
another Group. X is set by how many pipeline registers the long wires between
Groups get, which trades clock frequency against latency. The default here is
X = 11, the configuration that reaches the highest clock frequency.

This RTL is the memory system of that cluster: banks, crossbars, pipeline
registers, address decoding and response routing, from the Tile up to the
cluster. The cores themselves, their instruction caches and the DMA/AXI side are
not included; the 1024 core ports are ports of the top module, and testbenches
drive them with behavioural traffic generators.

## Hierarchy

| Level     | Contains                 | Cores | Banks | Memory  |
|-----------|--------------------------|-------|-------|---------|
| Tile      | 8 cores, 32 banks        | 8     | 32    | 32 KiB  |
| SubGroup  | 8 Tiles                  | 64    | 256   | 256 KiB |
| Group     | 4 SubGroups              | 256   | 1024  | 1 MiB   |
| Cluster   | 4 Groups                 | 1024  | 4096  | 4 MiB   |

Each core has four banks' worth of memory in its own Tile (the banking factor is
4), which keeps bank conflicts rare under random traffic.

Modules, bottom-up:

- `tcdm_pkg`: request and response structs, widths, and a function that returns
  the zero-load latency of each level.
- `spill_register`: a two-entry register slice. It cuts the valid, data and
  ready paths, so it adds exactly one cycle and still passes one item per cycle.
- `spill_pipe`: a chain of `Depth` spill registers; `Depth` 0 is a wire.
- `rr_arbiter`: round-robin arbiter with a grant lock (see below).
- `xbar_half`, `tcdm_xbar`: a valid/ready crossbar with one arbiter per output.
  `tcdm_xbar` pairs a request half (masters to slaves) with a response half
  (slaves back to masters).
- `tcdm_bank`: one 1 KiB SRAM bank (256 x 32-bit words) with byte enables and a
  one-cycle read.
- `tile`, `subgroup`, `group`, `terapool_cluster`: the four levels.

## The Tile

A Tile has 8 core ports, 32 banks and K = 7 remote ports in each direction:
7 master ports for requests leaving the Tile, and 7 slave ports for requests
arriving from other Tiles.

- The local crossbar is (8 + 7) x 32: the Tile's own cores and the 7 slave ports
  all compete for the 32 banks.
- The remote crossbar is 8 x 7: it steers each core's non-local requests to the
  master port that leads toward the target.
- Master port 0 leads to the other Tiles of the same SubGroup. Ports 1 to 3 lead
  to SubGroup (own + j) mod 4 of the same Group. Ports 4 to 6 lead to Group
  (own + j - 3) mod 4. Slave port j receives from the mirror direction: from
  SubGroup (own - j) mod 4, or from Group (own - j + 3) mod 4.
- Every master port has a spill register on the outgoing request and on the
  returning response. These are the registers that make a SubGroup access take
  3 cycles instead of 1.
- Each core receives responses from two sources, its local bank response and its
  remote response. A small 2:1 round-robin merge joins them.

## SubGroup and Group crossbars

A SubGroup holds four 8 x 8 crossbars, each with its 8 inputs from the 8 Tiles of
this SubGroup:

- One connects master port 0 of each Tile to slave port 0 of the Tiles of the
  same SubGroup.
- Three carry master port j (j = 1..3) of each Tile toward the Tiles of
  SubGroup (own + j). Their outputs leave the SubGroup through a register in each
  direction and arrive at slave port j of the target SubGroup's Tiles.

So a request to another SubGroup crosses three registers: the Tile master
register, the SubGroup master register, and the target bank. That is 5 cycles.

A Group holds three 32 x 32 crossbars, one per remote Group. Each has its inputs
from the 32 Tiles of this Group (master port 3 + j) and its outputs toward the
32 Tiles of Group (own + j). The remote-Group ports pass through the SubGroup
without a register.

## Reaching other Groups: the X in 1-3-5-X

The remote latency X is built from three places where registers can go:

| X  | Group master side | Group slave side | Link between Groups |
|----|-------------------|------------------|---------------------|
| 5  | 1                 | 0                | 0                   |
| 7  | 1                 | 0                | 1                   |
| 9  | 1                 | 1                | 1                   |
| 11 | 2                 | 1                | 1                   |

Each entry is a number of spill registers in each direction. The Tile master
register and the bank add the other two cycles. `group` derives the first two
columns from its parameter `RemoteGroupLatency`, and `terapool_cluster` derives
the third. Other values are rejected by an assertion at elaboration. The paper
names the four configurations and their latencies, but not this split. The
split is this design's choice: registers go first on the source side, then on
the long link, then at the destination.

## Addresses and responses

A 32-bit byte address is decoded from the low end:

| bits           | field                                  |
|----------------|----------------------------------------|
| [1:0]          | byte in word                           |
| [6:2]          | bank in Tile (32)                      |
| [9:7]          | Tile in SubGroup (8)                   |
| [11:10]        | SubGroup in Group (4)                  |
| [13:12]        | Group (4)                              |
| [21:14]        | row in bank (256)                      |

Consecutive words therefore fall in consecutive banks, across the whole cluster,
which spreads a linear array evenly over all banks. The paper does not give the
address map; this one is the usual word-interleaved layout and an assumption.

Every request carries a 16-bit id. The low 10 bits are the requesting core's
global index {group, subgroup, tile, core}; the remaining bits are free for the
core's own tag. Responses are routed back purely on these bits, level by level,
so no crossbar keeps state about requests in flight. Writes are acknowledged with
a response, so a core can count its outstanding stores. Atomic memory operations
are not implemented.

## Handshakes and ordering

Every link uses valid/ready. The sender holds valid and data until the receiver
takes them. Assertions in `spill_register` and `xbar_half` check this rule.
Reset is asynchronous and active-low. The bank array itself is not reset.

Crossbars are chained: a SubGroup crossbar feeds a spill register that feeds
another crossbar. That creates a subtle case. If an arbiter re-arbitrated while
its output was stalled, a different input could replace the one on the output,
and the data would change under a pending valid. `rr_arbiter` therefore locks a
grant that was not taken until it is taken. Round-robin fairness between
requesters is kept.

Requests from one core to the same bank stay in order. Requests to different
banks can return out of order, because the distances differ. The core side must
match responses by id.

## Latency and throughput

With uniform random addresses, a core at full size finds:

- 1 of 128 Tiles at distance 1,
- 7 at distance 3,
- 24 at distance 5,
- 96 at distance X.

The zero-load average is (1 + 7*3 + 24*5 + 96*X)/128. That gives 4.9, 6.4, 7.9
and 9.4 cycles for X = 5, 7, 9 and 11, close to what the paper reports
(4.7 or 4.9, 6.4, 7.9, 9.3).

`tb_interconnect_load` measured this at reduced size, 64 cores and 1-3-5-11,
where the formula gives 9.31:

| injected load (req/core/cycle) | throughput | average latency (cycles) |
|-------------------------------|------------|--------------------------|
| 0.01                          | 0.010      | 9.38                     |
| 0.05                          | 0.049      | 9.36                     |
| 0.10                          | 0.100      | 9.39                     |
| 0.20                          | 0.200      | 9.43                     |
| 0.40                          | 0.389      | 9.68                     |
| 0.80                          | 0.597      | 10.20                    |

At high load, the limit here is the traffic generator's cap of 8 requests in
flight per core, together with the remote latency. That cap is a testbench
choice, not part of the cluster.

## Simulating

All files in `rtl/` are compiled together. Each testbench in `tb/` is the top
of its own simulation. For example:

    verilator --binary --timing --assert -Wno-fatal -Irtl \
        rtl/tcdm_pkg.sv $(ls rtl/*.sv | grep -v tcdm_pkg) tb/tb_traffic_gen.sv tb/tb_terapool_cluster.sv \
        --top-module tb_terapool_cluster -o sim
    ./obj_dir/sim

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops. A watchdog
counts a failure if the simulation hangs.

| testbench              | what it shows                                                                                             |
|------------------------|------------------------------------------------------------------------------------------------------------|
| `tb_spill_register`    | one-cycle latency, full throughput, ordering, data held while stalled                                     |
| `tb_tcdm_bank`         | reads and writes against a model, byte enables, read latency 1, backpressure                              |
| `tb_tcdm_xbar`         | 4 x 3 crossbar under random traffic and stalls; every item delivered once, in order per pair              |
| `tb_tile`              | local and remote accesses, the right master port for each target, latency 1 and 3                         |
| `tb_subgroup`          | two SubGroups; latencies 1, 3 and 5; nothing leaks onto the remote-Group ports                            |
| `tb_group`             | two Groups at X = 5, 7 and 9; all latencies, random traffic                                               |
| `tb_terapool_cluster`  | whole cluster at reduced size, X = 11. Checks directed latencies 1/3/5/11 and random traffic, and counts each mechanism: every distance, stalls, response backpressure, the outstanding limit |
| `tb_interconnect_load` | throughput and latency against injected load (table above)                                                |

`tb_traffic_gen` is not a testbench but the stand-in core that the bigger tests
use. Its cores keep a shadow copy of the memory. To keep that copy exact while
many cores write, each bank row is owned by one core (a rotation over row and
bank), and every core reads anywhere but writes only its own words.

The top module's defaults are the full 1024-core, 4096-bank cluster. The
end-to-end testbenches override the sizes:

- `tb_terapool_cluster` uses 2 cores and 4 banks per Tile, 2 Tiles per SubGroup,
  and 4 SubGroups and 4 Groups (64 cores), so that every level and every port
  direction is still exercised.
- A full-size simulation was not run to completion: the generated C++ model of
  the whole cluster compiles too slowly. The largest size simulated is the
  64-core, 256-bank cluster above.
- The full-size top passes verilator lint and the slang front end.

To change the configuration, set `RemoteGroupLatency` on `terapool_cluster`
(5, 7, 9 or 11), or the size parameters `NumCores`, `BanksPerTile`, `BankWords`,
`TilesPerSubGroup`, `SubGroupsPerGroup` and `NumGroups`. The testbenches
only use equal numbers of SubGroups and Groups, as the full design has.

## Departures from the paper

- The Snitch cores, the instruction caches (L0 and L1), the DMA engines and the
  AXI interconnect are not in this RTL. Only the core-side data ports exist.
- The address map, the id layout, the split of the X registers, the write
  acknowledgement and the arbitration policy are assumptions. The paper fixes
  only the topology, the crossbar sizes and the latencies.
- Contention shows up as stalls on the valid/ready handshake; the crossbars
  have no queues beyond the spill registers listed above.
- Atomic operations on the banks are not modelled.
