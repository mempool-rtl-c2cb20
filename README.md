# MemPool: 256 cores sharing one 1 MiB L1 with a 5-cycle worst-case latency

MemPool is a processor cluster in which 256 small RISC-V cores share a single
L1 scratchpad memory of 1 MiB, split into 1024 banks of 1 KiB. Every core can
load any word of it directly, with no caches or coherence in between. A single
flat crossbar connecting 256 cores to 1024 banks cannot be built at a
reasonable clock rate. MemPool therefore arranges the cores and banks in a
hierarchy. Each level is connected by a small, low-diameter network, and a
load pays only for the levels it crosses:

| target bank                       | zero-load round trip |
|-----------------------------------|----------------------|
| in the core's own tile            | 1 cycle              |
| in another tile of the same group | 3 cycles             |
| in another local group            | 5 cycles             |

A second idea keeps the common case in the first row. A *scrambler* remaps a
small part of the address space so that each tile owns a contiguous
*sequential region*. Private data, such as a core's stack, placed there stays
in the core's own tile. Everything else stays word-interleaved across all
1024 banks, which spreads the load evenly.

This repository gives synthesizable SystemVerilog for the memory system of
that cluster: tiles, local groups and the top level, with the banks, the
interconnect, the reorder buffers and the instruction caches. The cores
themselves are not included (see "What is not here").

## Hierarchy

```
cluster (mempool_cluster)            256 cores, 64 tiles, 1024 banks
 └─ 4 x local group (mempool_group)  16 tiles each
     └─ 16 x tile (mempool_tile)     4 core ports, 16 banks, 2 KiB I-cache
```

All sizes are in `mempool_pkg`, and their defaults are the full 256-core
configuration.

| constant            | value | meaning                                 |
|---------------------|-------|-----------------------------------------|
| `NumCores`          | 256   |                                         |
| `NumCoresPerTile`   | 4     |                                         |
| `NumTiles`          | 64    | 4 groups x 16 tiles                     |
| `NumBanksPerTile`   | 16    | 1 KiB each (256 x 32 bit)               |
| `NumTilePorts`      | 4     | K: local (L), east (E), north (N), northeast (NE) |
| `ICacheSizeBytes`   | 2048  | per tile, 4 ways                        |
| `RobDepth`          | 8     | outstanding loads per core (own choice) |
| `SeqMemSizePerTile` | 4096  | sequential region per tile (own choice) |

## Address map and the scrambler

Byte addresses are 20 bits wide inside the L1 (bits above 19 are ignored, so
the space wraps every 1 MiB). In the plain interleaved map:

```
 19          12 11       6 5     2 1  0
+--------------+----------+-------+----+
|   row (8)    | tile (6) |bank(4)|byte|
+--------------+----------+-------+----+
                 [11:10] = local group
```

Consecutive words therefore visit the 16 banks of tile 0, then those of
tile 1, and so on. Every run of 64 words crosses all 64 tiles.

The scrambler (`mempool_scrambler`) creates a sequential region of
2^S = 4 KiB per tile. That is s = 6 of each bank's 8 rows. For an address
below 2^(S+t) = 256 KiB it swaps two fields. The 6 bits just above the bank
field (bits 11:6) move to the bottom of the row field, and the 6 bits that
were there (17:12) move down to become the tile field:

```
addr_o[11:6]  = addr_i[17:12]      tile  <- which 4 KiB block
addr_o[17:12] = addr_i[11:6]       row   <- position inside the block
```

As a result, bytes `4096*T ... 4096*T+4095` all land in tile T, still
interleaved over its 16 banks. Addresses from 256 KiB up are not touched. The
swap is a wire crossing and one 2:1 multiplexer on 12 bits. Each tile's
4 KiB gives each of its four cores 1 KiB of stack. The region size is a
parameter. The design needs only that it is a power of two of at least one
row per bank.

## Anatomy of a load

The path of a load from core *c* of tile *T* (group *g*) to a bank in group *h*:

1. **ROB** (`mempool_rob`). The load takes the next free slot of the core's
   8-entry reorder buffer, and the slot index goes with the request.
   - Stores take no slot: only reads are answered.
   - A full ROB stalls the core's loads.
2. **Scrambler and decoder** (`mempool_scrambler`, `mempool_addr_decoder`).
   The scrambled address gives a target tile *T'* and a bank.
   - If T' = T, the request enters the tile's request crossbar directly.
   - Otherwise it picks a tile port d = g XOR h: 0 = L, 1 = E, 2 = N,
     3 = NE.
3. **Remote request crossbar** (4 cores x 4 ports). It feeds the tile's
   master request ports through a register boundary.
4. **Group network** (`mempool_group`).
   - Port L goes through a 16x16 crossbar to the L slave port of tile T'.
   - Ports E, N and NE each go through a 16x16 radix-4 butterfly owned by
     the sending group, then through a register on each of the 16 lanes, to
     the group interface of that direction.
5. **Cluster wiring** (`mempool_cluster`). The direction-d interface of
   group g connects to the direction-d slave interface of group g XOR d.
   - On the slave side, lane j goes straight to the direction-d slave port
     of tile j.
   - Each pair of groups is therefore linked by exactly one direction:
     E links 0–1 and 2–3, N links 0–2 and 1–3, NE links 0–3 and 1–2.
6. **Bank** (`mempool_bank`). The tile's request crossbar (4 core inputs +
   4 slave ports to 16 banks) arbitrates round-robin per bank. The bank
   reads in one cycle and returns the data together with the request's
   metadata: initiating tile, core and ROB slot.
7. **Return path** (a mirror of the request path). The bank's response
   crossbar sends the response either to the local core or, through a
   register boundary, out of the slave port the request came in on. The
   tile records that port next to the metadata while the bank reads.
   - The group's response butterfly routes on the initiating tile.
   - Inside the initiating tile, a 4x4 crossbar routes on the core index.
   - A 2:1 round-robin merge with the local responses then feeds the ROB.
8. **ROB again.** Responses arrive out of order and are written into their
   slots. The core always receives the oldest one.
   - A response for the oldest slot bypasses the buffer in the same cycle,
     so the ROB adds no latency.

Counting registers on a remote-group load gives the 5 cycles:

- the tile's master request register;
- the group's master request register;
- the bank;
- the remote tile's master response register;
- the group's master response register.

A load to another tile of the group crosses only the first, third and fourth
of these, giving 3 cycles. A load to the own tile crosses only the bank,
giving 1 cycle.

## Interconnect building blocks

- **`mempool_xbar`**: an m x n fully connected switch.
  - Each input carries a payload and an output index.
  - Each output has its own round-robin arbiter (`mempool_rr_arb`).
  - An optional elastic buffer can be placed at each output.
  - Two transfers to the same output from the same input stay in order.
    Nothing else is ordered: ordering is the ROB's job.
- **Grant locking.** An arbiter whose output is stalled keeps its grant
  until the transfer completes. Without this, a higher-priority request
  could replace a payload already on the wire. That would break the valid
  and data stability that the elastic buffers and the multi-stage
  butterflies rely on. An assertion in the crossbar checks the rule at every
  input.
- **`mempool_spill_reg`**: the register boundary.
  - A two-entry elastic buffer, so that valid, data and ready are all
    registered while one transfer per cycle is still possible.
  - Every dashed "register boundary" of the architecture is one of these.
- **`mempool_butterfly`**: an N x N radix-4 butterfly of log4(N) layers of
  4x4 crossbars, two layers for N = 16.
  - Layer l routes on base-4 digit (L−1−l) of the destination, most
    significant digit first.
  - Output k of switch s feeds input (4·(4s+k)) mod N + (4s+k) div (N/4) of
    the next layer. Each layer thereby moves the digit just resolved out of
    the way of the next one.
  - There is exactly one path per source/destination pair, and routing is
    oblivious.
  - `PipeLayer` can insert an elastic buffer after a layer. The default is
    none.

## Instruction cache

Each tile has a 2 KiB, 4-way set-associative instruction cache
(`mempool_icache`) shared by its four cores.

- **Lines and replacement.** Lines are 16 bytes, giving 32 sets. The victim
  is chosen round-robin per set.
- **Lookups.** Each cycle one core's lookup is granted (round-robin). A hit
  returns the word in that same cycle.
- **Misses.** A miss sends one AXI4 read burst: `len` = 3, `size` = 2 (four
  32-bit beats), INCR. The cache is blocked until the last beat has been
  written into the victim way.

Only the AR and R channels exist, because the cache never writes. The 64
refill ports come out of the cluster as plain AXI4 read channels.

## Top-level interface (`mempool_cluster`)

Per core (256 each):

- a data request: `core_req_valid_i/ready_o`, and `core_req_i` with address,
  write enable, byte enables and data;
- a load response in program order: `core_rsp_valid_o/ready_i/data_o`;
- a fetch port: `fetch_valid_i/addr_i`, and `fetch_ready_o/data_o` for a
  hit.

Per tile (64): `axi_ar_*` and `axi_r_*` for instruction refills.

All handshakes are valid/ready. A transfer happens in a cycle where both are
high. Valid and data must not change while valid is high and ready is low.
Reset (`rst_ni`) is asynchronous and active low. It clears all control
state but not the bank or cache data arrays.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares
against an independent model, has a watchdog, and ends with a line
`TB_RESULT checks=N failures=M`.

| testbench                 | what it establishes |
|---------------------------|---------------------|
| `tb_mempool_spill_reg`    | order and no loss under random valid/ready; full throughput |
| `tb_mempool_xbar`         | every packet reaches its output once, per-pair order, fairness, stable outputs |
| `tb_mempool_butterfly`    | the same for a 16x16 butterfly and a 64x64 one with a pipeline stage; zero-load latency |
| `tb_mempool_bank`         | byte-enabled writes, one-cycle reads, back-pressure |
| `tb_mempool_rob`          | in-order delivery of randomly reordered responses, bypass, full stall |
| `tb_mempool_scrambler`    | the field swap and the region boundary against a reference formula |
| `tb_mempool_addr_decoder` | local/port/bank/tile for random addresses and tile indices |
| `tb_mempool_icache`       | hit/miss data, refill count, AXI burst format, 4-way eviction |
| `tb_mempool_tile`         | a tile against a model of the rest of the cluster; 1-cycle local latency |
| `tb_mempool_group`        | a group with its E/N/NE interfaces looped back onto itself; 1/3/5-cycle latencies |
| `tb_mempool_cluster`      | the full 256-core cluster, no parameters overridden |

The cluster testbench drives every core port from a traffic model
(`tb_core_model`) and every refill port from an AXI memory model. It runs
four phases:

1. **Fill:** all cores store interleaved words and stack words.
2. **Probe:** with the cluster idle, cores 0 and 255 each load once from
   their own tile, another tile of their group and each other group. The
   cycles are checked against 1/3/5.
3. **Random loads:** 0.3 requests/core/cycle, a quarter of them to the
   core's own stack, 6144 loads in all. Every datum is checked.
4. **Fetch:** instruction fetches that must cause exactly 768 refills.

The testbench counts, and requires to be non-zero:

- local, group and remote accesses;
- sequential-region accesses;
- contention stalls;
- responses that reach a ROB out of order;
- register boundaries filled to both entries;
- cache refills.

A typical run ends with:

```
average load latency 4.93 cycles
mechanisms: local=2919 group=1114 remote=4167 seq=2600 stalls=1771 rob_reorder=1624 spill_full=1135 refills=768
TB_RESULT checks=9243 failures=0
```

The average latency of about 5 cycles at 0.3 requests/core/cycle agrees with
the "under 6 cycles at 0.33" target of the architecture.

To run any testbench with plain Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_mempool_cluster \
          rtl/mempool_pkg.sv tb/tb_mempool_cluster.sv
./obj_dir/Vtb_mempool_cluster
```

Building the full cluster takes a few minutes; the simulation itself takes
about a second.

## Choices this design makes where the architecture leaves it open

- **Sequential region.** 4 KiB per tile (256 KiB in total).
- **ROB depth.** 8 loads per core. Stores are posted: they get no response
  and no slot.
- **Direction wiring.** A port is named by the XOR of the two group
  indices. This is one consistent reading of the four-group floor plan.
- **Placement.**
  - The butterflies sit in the group that sends.
  - The tile's response register sits on the responses it sends back to
    remote initiators.

  Together these reproduce the 1/3/5 latencies.
- **Response return port.** A response leaves through the port its request
  arrived on, not a port recomputed from the address. This also makes a
  group work when its interfaces are looped back.
- **Grant locking and spill registers.** The two-entry spill register and
  the grant locking of the arbiters (see above).
- **Instruction cache.** 16-byte lines, round-robin replacement, one lookup
  per cycle, blocking refill, same-cycle hit.
- **Bank storage.** Banks are written as arrays with an output register.
  A real chip would use SRAM macros there.

## What is not here

- **The cores.** The cores are 32-bit single-issue RISC-V cores designed
  elsewhere. Their data and instruction ports are the cluster's ports, so a
  core model or a real core can be attached per port.
- **The refill network.** The network that would serve the 64 instruction
  refill ports is left outside; the ports are plain AXI4 read channels.
- **Atomics.** Atomic memory operations (the "A" extension of the cores) are
  not supported by the banks.
- **Alternative topologies.** Alternatives with one or four global 64x64
  butterflies, and the idealised single-cycle baseline, are not built. The
  hierarchy here is the chosen one.
- **Physical design.** Area, timing and power are not modelled.
