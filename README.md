# A reconfigurable memory and network fabric for a Loki-style many-core chip

The chip is a grid of identical tiles. Each tile has eight small cores and eight 2 kB memory
banks. The idea behind the memory system is that none of it is fixed in hardware:

- Each bank can be a scratchpad, an L1 cache bank, or one way of an L2 cache.
- Software decides, per core and per logical channel, which banks form a cache, what is cached
  where, and which levels of the hierarchy are skipped.

The mechanism that makes this possible is a small per-core table, the **channel map table
(CMT)**. Every value a core sends goes out on a numbered logical channel. The table turns that
number into one of three kinds of destination:

- a core on another tile, with end-to-end credits;
- a set of cores on the same tile, addressed by a bitmask (multicast);
- a *virtual group* of banks on the same tile, with flags choosing cache or scratchpad mode, which
  levels to bypass, and which core input buffer gets the reply.

Rewriting one table entry reconfigures the memory system as that core sees it. Memory is just
another network destination. A load is a request message, and its result arrives some cycles later
in one of the core's input buffers. The core reads that buffer like a register, and stalls if the
buffer is empty.

This RTL implements everything in such a tile and chip **except the core pipelines**:

- the CMT;
- the input buffers;
- the level-0 instruction packet cache and the instruction channel selection;
- the banks;
- the intra-tile crossbars and core-to-core buses;
- the L2 directory and miss handling;
- the five inter-tile mesh networks.

Decode, register file and ALU are not part of the design. Each core appears at the tile boundary
as a set of ports:

- a stream of network sends;
- a port for writing CMT entries;
- an instruction-fetch request;
- the instruction stream going to decode;
- the read side of its data input buffers.

A processor pipeline, or a testbench, drives these ports.

## Sizes and numbering

| Item | Value | Where it is set |
|---|---|---|
| Tiles | 4 x 4 = 16 (128 cores, 128 banks) | `loki_chip` `TILES_X`, `TILES_Y` |
| Cores and banks per tile | 8 and 8 | `loki_pkg` |
| Bank | 2048 B = 512 words = 64 lines of 8 words | `loki_pkg` |
| CMT | 16 entries per core | `loki_pkg` |
| Input channels per core | 0 primary instructions (IPK cache), 1 secondary instructions, 2..5 data | `loki_pkg` |
| Input buffer depth | 4 words; also the default credit count | `loki_pkg` |
| IPK (level-0 instruction) cache | 64 instructions, FIFO replacement | `ipk_cache` |
| L2 directory | 16 entries, index position configurable | `l2_directory` |
| Main memory latency in the testbench model | 35 cycles | `tb/main_memory_model.sv` |

Mesh coordinates are as follows:

- Tile (column c, row r) is at mesh coordinate (c+1, r). Its tile index is r*4 + c.
- Column x = 0 belongs to the off-chip memory controller, at (0,0).
- The memory controller is reached through the west ports of tile 0.
- Mesh directions inside a tile are numbered 0 north (y+1), 1 east, 2 south and 3 west.

## Moving a word: the tile datapath

A core's send (`core_out_t`) carries these fields:

- a logical channel;
- a memory operation;
- an address, or a payload for core destinations;
- store data;
- an end-of-packet bit.

The CMT is read combinationally, and the entry steers the send.

**To memory.** A group is 2^`group_log2` banks starting at `bank_base`. The bank is
`bank_base + ((addr >> 5) mod group size)`, taken modulo 8. So consecutive 32-byte lines go round
the group. The request goes through the registered **request crossbar** (8x8) and reaches the bank
in the next cycle.

The bank answers from its response register one cycle after it accepts the request. The answer then
goes through one of two unregistered crossbars into an input buffer of the core named in the entry:

- the **instruction crossbar**, if the return channel is 0 (the IPK cache);
- the **data crossbar**, for any other channel.

A load sent in cycle *t* can therefore be read in cycle *t+3*: one cycle to the bank, one in the
bank, one into the buffer. `tb_loki_tile` and `tb_loki_chip` check this latency.

**To local cores.** The core-to-core buses (`c2c_bus`) carry a bitmask. A flit is admitted only
when every core in the mask has space in the named buffer, and it then reaches all of them in the
same cycle. No credits are needed inside a tile.

**To another tile.** The flit goes on the core-to-core mesh. It carries the sender's tile, core
and CMT entry, so that credits can find their way back.

- The sender's entry starts with `credits` credits. A field value of 0 means the target buffer
  depth.
- The sender spends one credit per flit and stalls at zero.
- On the receiving tile, the inter-tile unit (`intertile_comm_unit`) injects the flit into the
  local buses, marked *remote*.
- Whenever the core reads a remote-marked word, the unit owes the sender one credit. Owed credits
  go back one per cycle over the credit mesh.
- Each input channel accepts one remote connection at a time.

Every network is wormhole-switched. An arbiter that has granted a packet stays with it until the
end-of-packet flit has passed. A multi-word request, such as a line write-back, is never
interleaved with another request.

## Banks: one array, three roles

`memory_bank` is a 512-word array with 64 tags. Each access picks one of three roles:

- **Scratchpad.** The request's scratchpad bit makes the address index the array directly, with no
  tag check.
- **L1 cache.** The bank is direct mapped, write-back and write-allocate. The line index and tag are
  taken above the bank-select bits of the group, so a group of 4 banks behaves like one 8 kB
  direct-mapped cache.
- **L2 way.** This applies when the tile's `l2_mode` bit is set. The tile's cores then cannot use
  their banks. The miss handling logic broadcasts each request that arrives from another tile to all
  eight banks:
  - every bank compares its tag and raises `l2_hit`;
  - the hitting bank serves the request;
  - if no bank hits, the bank chosen by a round-robin victim pointer replaces its line.

  The eight banks thus act as one 8-way set-associative cache.

Besides word loads and stores, a bank supports these line operations:

- **fetch line:** eight response words, end-of-packet on the last;
- **store line:** one word of a full-line write, which allocates the line without reading it from
  memory;
- **flush:** write the line back if it is dirty;
- **invalidate**;
- **prefetch:** fetch the line with no response.

When a request sets `bypass_l1`, its word goes straight to the next level.

A bank handles one request at a time. A miss stalls that bank until its refill, which happens in
two steps:

1. If the victim line is dirty, it is written back first, one word per cycle.
2. The line is then fetched.

## Misses: directory and miss handling logic

Each tile has one `miss_handling_logic`. It picks one bank's next-level request at a time, in
round-robin order, and looks the address up in the tile's `l2_directory`:

- Address bits `[shift+3 : shift]` index 16 entries. `shift` is set by software.
- Each entry names the tile responsible for that address: an L2 tile, or (0,0) for main memory.
- Each entry also holds four bits that replace the index bits in the forwarded address. This is a
  simple form of address translation.
- A low shift spreads lines across several L2 tiles. A high one keeps contiguous data in one tile.
- After reset, every entry sends to main memory unchanged.

Requests go out on one of two networks:

- for an L2 tile: **request network 1**;
- for main memory, or when the request asked to bypass L2: **request network 2**.

Using separate networks means an L2 tile's own misses can never queue behind the requests it is
serving. Refill words come back on the **response network**, and the logic hands them to the waiting
bank.

In an L2 tile the same block also serves requests arriving on request network 1. It broadcasts each
request to the banks as described above, then streams the responding bank's words back to the
requester.

One miss and one served request can be outstanding per tile at a time. This is the simplest choice
that works. It limits memory-level parallelism, so it is the first thing to widen for performance.

## Instruction supply

Cores fetch instructions in *packets*, roughly basic blocks, which always run to the end once
started. There are two instruction channels:

- The **primary channel** feeds the IPK cache, a 64-entry FIFO-replaced buffer:
  - One tag, the packet's address, is kept at each packet's first entry.
  - A packet's first entry is always overwritten first, and overwriting it invalidates the tag. A
    hit therefore always finds the whole packet.
  - On a miss, the cache pulses `fetch_miss`. The tile's owner (normally the core) then sends a
    fetch-line request on a CMT memory channel whose return channel is 0. The returning words are
    written into the cache and passed on to decode in the same cycle.
- The **secondary channel** is an ordinary 4-deep buffer. Other cores write instructions into it.

`fetch_select` switches between the two channels only at packet boundaries. At a boundary, the
secondary channel wins if it holds an instruction.

## Chip and mesh

`loki_chip` places 16 `loki_tile`s in a 4x4 grid. Each tile has five `mesh_router`s, one per
network: core-to-core, credits, responses, request 1 and request 2.

- Routers are wormhole routers with one registered stage per output, so each hop takes one cycle.
- Routing is dimension-ordered, first Y and then X, which is deadlock-free on a mesh.
- Because of this order, traffic for the memory controller first goes to row 0 and then west. It
  leaves the chip through the west ports of tile 0, which are the chip's `mem_req_*` outputs and
  `mem_resp_*` inputs.
- Response flits from the memory controller carry the destination tile coordinate
  (`mem_resp_dst`).
- Every other edge port is tied off: no input arrives there, and the port is never ready.

## Where this follows the source architecture and where it is this design's own choice

**Taken from the architecture description:**

- 8 cores and 8 banks per tile, and 16 tiles;
- 2 kB banks and 8-word lines;
- the 3-cycle load latency;
- one-cycle hops within a tile and between tiles;
- wormhole routing everywhere;
- blocking buffers;
- credit-based flow control between tiles, with the buffer depth as the default credit count;
- multicast by bitmask, and local networks that admit a flit only when it can be buffered;
- virtual bank groups, cache or scratchpad mode, and per-level bypass;
- a direct-mapped L1 and an 8-way L2 built from the banks of a whole tile;
- the directory with configurable index bits and address-bit substitution;
- the two instruction channels, with packet-boundary scheduling and secondary-first priority;
- the FIFO-replaced, 64-instruction level-0 cache;
- a one-cycle CMT update;
- a 35-cycle main memory in the testbench.

**This design's own choices:**

- all field widths and encodings;
- the channel numbering;
- 16 CMT and directory entries;
- 4-entry buffers;
- power-of-two group sizes;
- round-robin arbitration and victim choice;
- write-back and write-allocate caching;
- one outstanding miss per bank and per tile;
- the use of two request networks;
- YX routing and the memory controller at (0,0);
- one remote connection per input channel;
- how credits are returned.

**Differences from the source architecture:**

- There is no core pipeline. The `sendconfig` metadata (memory operation, end-of-packet) is simply
  a field of each send.
- Connection set-up and tear-down between remote cores has no explicit message. A new sender
  simply takes over the channel's credit return address.
- A group whose size is not a power of two (for example 3 banks) cannot be made.
- Writing back dirty lines costs one cycle per word plus the time to select the line. The
  architecture quotes "one cycle per word plus one per line".

## Files

`rtl/` holds one module per file:

| File | Contents |
|---|---|
| `loki_pkg.sv` | types and constants |
| `network_fifo` | input buffers |
| `channel_map_table` | the CMT |
| `ipk_cache` | level-0 instruction packet cache |
| `fetch_select` | instruction channel selection |
| `crossbar` | the request, data and instruction crossbars |
| `c2c_bus` | local core-to-core buses |
| `memory_bank` | banks |
| `l2_directory` | L2 directory |
| `miss_handling_logic` | miss handling and L2 serving |
| `mesh_router` | mesh routers |
| `intertile_comm_unit` | inter-tile delivery and credit return |
| `loki_tile` | one tile |
| `loki_chip` | the top level |

`tb/` holds one self-checking testbench per module, `tb_<module>.sv`, plus `main_memory_model.sv`.
The main memory model is behavioural:

- it has a fixed latency;
- it fills each line on first touch with `{addr[31:2],2'b00} ^ 32'h5A000000`;
- it counts fetches, loads, stores and write-backs.

Every testbench:

- prints `TB_RESULT checks=<n> failures=<n>` and stops;
- has a watchdog;
- uses only `$urandom` for random stimulus.

`tb_loki_chip` runs the chip at its full default size. It counts each mechanism and fails if any of
them never occurred:

- L1 miss and hit;
- directory translation;
- L2 miss and hit;
- an L1 flush read back through L2 by another tile;
- bypass of both levels;
- an inter-tile connection that stalls on credits;
- multicast;
- an IPK miss and hit.

`tb_loki_tile` checks the following on one tile:

- the 3-cycle load latency;
- random cached traffic against a reference model;
- multicast;
- secondary-channel priority;
- credit stalls and credit return.

## Simulating

Use Verilator 5 with the package first. For example, for the whole chip:

```
verilator --binary --timing -j 0 --top-module tb_loki_chip \
          rtl/loki_pkg.sv $(ls rtl/*.sv | grep -v loki_pkg) \
          tb/main_memory_model.sv tb/tb_loki_chip.sv
./obj_dir/Vtb_loki_chip
```

- `tb_loki_chip` takes a few minutes to build and about a second to run.
- The block testbenches need only their module, its sub-modules and the package.
- `tb_loki_tile` also needs `main_memory_model.sv`.

Verilator reports UNOPTFLAT on the packed valid/ready vectors in `loki_tile` and `loki_chip`. These
are dependencies between different bits of one vector, not real combinational loops. The module
headers explain this.
