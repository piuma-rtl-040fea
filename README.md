# PIUMA socket in SystemVerilog

PIUMA is a processor for graph analytics. Graph codes spend most of their time on scattered 8-byte loads, and only a few of those loads hit in a cache. PIUMA gives up on large caches and wide cache lines. Instead it relies on three things:

- many simple hardware threads that hide memory latency;
- memory controllers and a network that move 8 bytes as efficiently as 64;
- offload engines that do pointer chasing, copies, atomics and collectives next to the data rather than in the cores.

Every core in every socket sees one global address space.

This RTL models one socket: eight blocks joined by a 2-D mesh of 10-port routers. Every piece of the memory system has RTL: the routers, the network interfaces, address translation, the scratchpads, the memory controllers, remote atomics, indirect loads, DMA, hardware queues, collectives and the coherence directory. The cores are not built, because their instruction set is not public. In their place the top module brings out one memory-request port per block, plus the thread schedulers and register files of the multi-threaded cores.

## Organisation

```
piuma_socket
 ├─ mesh (8 x 2 routers, XY routing)           router ×16 ─ sync_fifo
 ├─ piuma_block ×8
 │   ├─ att              application address → {region, block, offset}
 │   ├─ net_tx/net_rx ×2 packet ↔ flits, credit flow control
 │   ├─ mem_ctrl         DRAM word port, lines, atomics, indirect loads ─ atomic_alu
 │   ├─ spad_tgt → mem_arb → spad (4 MB, in-place atomics) ─ atomic_alu
 │   ├─ dma_engine       strided copy / gather / scatter
 │   ├─ queue_engine     FIFOs kept in scratchpad
 │   ├─ collective_engine over the block's 6 cores
 │   └─ mtc_sched + regfile ×4  (16 threads × 32 registers each)
 ├─ collective_engine    over the 8 blocks
 └─ shadow_tag           MOESI-F state of every tracked line ─ moesif_fsm
```

`piuma_pkg.sv` holds every shared type: the flit, the packet header, the opcodes, the atomic operations, the address regions and the coherence states and events.

## Addresses

A core issues an *application* address. Each block's ATT (address translation table) holds a few rules, and each rule is `base, size, mode, region, granularity, physical base`. There are two modes:

- **Block partitioned**: the whole range belongs to one block.
- **Interleaved**: consecutive chunks of 2^gran bytes go round robin over the eight blocks. Chunk k goes to block k mod 8, at offset `phys_base + (k div 8) << gran + position in chunk`.

The result is a 40-bit physical global address `{region[1:0], block[2:0], offset[34:0]}`. The regions are 0 for DRAM, 1 for scratchpad and 2 for control registers. When no rule matches, `att_miss` is raised and the request is dropped. The lowest-numbered matching rule wins.

## Network

A flit has 200 data bits (a 25-byte link) plus head and tail marks. A packet is 1, 2 or 4 flits. Its 136-bit header sits in the top of the first flit, next to the first 8 bytes of payload. This gives up to 8, 16 or 64 bytes of payload: reads, writes and atomics use 1 flit, indirect loads and their forwards use 1 flit, and line transfers use 4. The header holds:

- destination router and port;
- source router and port;
- opcode and length;
- an 8-bit tag;
- the 40-bit address;
- a 64-bit auxiliary word (the indirect base or the atomic operation and compare value);
- the indirect index shift.

The router (`router.sv`) has ten ports:

- 0 to 3 are north, east, south and west;
- 4 is the block;
- 5 and 6 are the two optical "Net" ports of each switch;
- 7 to 9 are spare.

Ports 5 to 9 become the `ext_*` ports of the top. The router works as follows:

- Each input has an 8-flit buffer.
- Routing is strict X-then-Y.
- Each output has a round-robin allocator. It grants a head flit only when the downstream credit count covers the **whole** packet (virtual cut-through). Once granted, the output stays with that input until the tail flit.
- A credit goes back upstream one cycle after a flit leaves the buffer.

A flit takes four cycles with no load: buffer, allocation, switch register, link register. `tb_router` measures this latency. The corner-to-corner latency on the 8 × 2 mesh is checked in `tb_mesh`.

Each block owns two routers:

- Router 0 (the *core side*) sends the cores' requests and receives their responses.
- Router 1 (the *target side*) receives requests for this block's memory and sends the answers.

Splitting the sides this way means a response never waits behind a request in the same buffer.

## Memory operations

The target side steers each request by its region:

- DRAM requests go to `mem_ctrl`;
- scratchpad requests go to `spad_tgt`.

`spad_tgt` breaks a line into 8 word accesses and shares the scratchpad with the DMA and queue engines through `mem_arb`. The operations are:

| opcode | what happens at the target |
|---|---|
| RD8 / WR8 | one 8-byte word; WR8 is acknowledged |
| RDLINE / WRLINE | 64 bytes as 8 word accesses; the response is a 4-flit packet |
| ATOMIC | read, `atomic_alu`, write back at the memory. The old value is returned. The operations are add, and, or, xor, signed min/max, swap and compare-and-swap |
| INDRD | indirect load `A[B[i]]`. The controller reads `B[i]` at the address and forms `A + (B[i] << shift)`, with A in the aux word. If that word is in its own DRAM it reads it and answers. Otherwise it forwards a read to the owning block, carrying the original requester as source, and the owner answers the requester directly. That is three network crossings instead of four |

The memory controller has one request in service at a time. It talks to DRAM through a plain 8-byte word port (request/ready, then read data in order). The DDR5 controller, the PHY and the memory chips are outside this RTL. The testbenches use a behavioural word memory with latency and random stalls.

## Offload engines

- **DMA** (`dma_engine`) works on 8-byte elements with one access outstanding, and supports three modes:
  - copy: `dst[i] ← src[i·stride]`;
  - gather: `dst[i] ← base[idx[i]]`;
  - scatter: `base[idx[i]] ← src[i]`.

  In a block it works on the local scratchpad.
- **Queues** (`queue_engine`) keep four descriptors: base, capacity, head, tail and count. Elements live in scratchpad. A push to a full queue or a pop from an empty one answers with `ok = 0`.
- **Collectives** (`collective_engine`) gather one arrival per participant and fold the values with add (which also serves as a barrier), min or max. A release pulse and the result follow one cycle after the last arrival. Collectives have two levels: the six cores of a block, then the eight blocks of the socket.

## Threads

Each block has four multi-threaded cores with 16 threads each, plus two single-threaded cores, for 66 threads. `mtc_sched` picks the next ready thread in round-robin order every cycle. A thread becomes not ready from its issue until its instruction completes. This is the latency hiding that PIUMA relies on: one instruction in flight per thread, with no caches to wait on. `regfile` keeps 32 64-bit registers per thread, with two read ports, one write port and write-through forwarding. The decode and execute stages are not built.

## Coherence

The data caches use MOESI-F states. `moesif_fsm` is the next-state table for one line. `shadow_tag` is the die-level directory, indexed by line and cache; it holds 48 caches × 64 tracked lines. A read that misses gets E, or S if another cache holds the line. A write moves the writer to M and invalidates every other copy; `resp_inval` lists the copies it invalidated. Illegal events are flagged. The directory is reached through its own port. How the caches reach it on the die is not modelled.

## What is not here, and where this departs from the original design

- The cores' pipelines, the instruction and data caches, DDR5, optical I/O and PCIe are not built. Their attachment points are ports of `piuma_socket`.
- Some choices are this design's own: the header layout and flit packing, the 8-flit buffers, the ATT rule format, the two routers per block with their placement (block b uses x = 2·(b mod 4) + side, y = b div 4), the set of atomic operations, the queue descriptor format, and one request at a time in the controllers.
- Strict XY routing is used. The original routing follows XY only loosely, and does not say how it deviates.
- The original design counts at most five mesh hops per socket. An 8 × 2 mesh with XY routing has up to eight hops, so the actual topology may differ from the one built here.
- The DMA engine does not interpret compressed sparse formats and does not transform data.

## Simulating

Every block has a self-checking testbench in `tb/`, named `tb_<module>`. `tb_piuma_socket` runs the full-size socket end to end: eight 4 MB scratchpads and sixteen routers, with behavioural DRAMs. It covers:

- concurrent remote and local reads and writes from all blocks;
- line transfers;
- contended remote atomics;
- local and forwarded indirect loads;
- DMA gather and scatter;
- queue overflow and underflow;
- a 48-core barrier-sum;
- a coherence invalidation;
- thread issue;
- an ATT miss;
- back-pressure that fills the network buffers and makes routers hold packets for credits.

It counts each of these and fails if any never happened. Example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb rtl/piuma_pkg.sv \
  tb/tb_piuma_socket.sv --top-module tb_piuma_socket
./obj_dir/Vtb_piuma_socket +verilator+rand+reset+2
```

Each run prints `TB_RESULT checks=N failures=M`. The socket build takes a few minutes. Its simulation runs about 6000 cycles in under a second.
