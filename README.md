# Pointer-chase prefetcher for linked data structures

Caches work well for arrays but poorly for linked lists, trees and hash
chains. The nodes of such structures are allocated dynamically and scattered
through memory, so the first touch of almost every node misses. This design
puts a small **pointer-chase prefetcher** between a processor's data cache
and a pipelined memory. Software gives the hardware a hint: a load whose
result is the address of the next node is issued as `lw.cp` ("load word,
chase pointer") instead of `lw`. The semantics are the same as `lw`. When
such a load misses in the cache, the prefetcher returns the line as usual.
It also reads the loaded word out of that line, treats it as the next node's
address, and fetches the next node's line from memory in the background.
When the program follows the pointer, the load still misses in the cache,
but the prefetcher answers it in one cycle instead of a full memory round
trip.

The RTL covers the memory system of such a machine:

```
  processor ports (not included)
   imemreq/imemresp            dmemreq/dmemresp          32-bit words
        |                            |
   blocking_cache (I)          blocking_cache (D)        256 B, 16 B lines
        |                            |  read / write / init / read-cp
        |                      prefetcher                4 lines, 1 prefetch in flight
        |                            |
   mem port 0                  mem port 1                128-bit lines
        +-------- comb_mem + mem_pipe x2 --------+       fixed latency
```

Every link is a val/rdy channel: a message moves in a cycle where both `val`
and `rdy` are high. The processor itself is not part of the RTL. Its two
ports are the ports of `pcp_system`, and the testbenches drive them.

## Messages

`rtl/pcp_pkg.sv` defines four packed structs. The field order and bit
positions match the message layout of the original design:

| message     | bits | fields (MSB first)                                             |
|-------------|------|----------------------------------------------------------------|
| `cachereq_t`  | 77   | type[76:74] opaque[73:66] addr[65:34] len[33:32] data[31:0]    |
| `cacheresp_t` | 45   | type[44:42] opaque[41:34] len[33:32] data[31:0]                |
| `memreq_t`    | 175  | type[174:172] opaque[171:164] addr[163:132] len[131:128] data[127:0] |
| `memresp_t`   | 143  | type[142:140] opaque[139:132] len[131:128] data[127:0]         |

The type codes are `READ=0`, `WRITE=1`, `INIT=2` and `READ_CP=3`. The first
three follow the usual order; the value 3 for the pointer-chase read is this
design's choice. `INIT` writes a cache or the prefetcher directly and is used
to load test state.

## The prefetcher (`rtl/prefetcher.sv`)

### Storage

The prefetcher is a 4-entry, direct-mapped buffer of 16-byte lines:

* address bits [3:0] are the byte offset, [5:4] the index and [31:6] the 26-bit tag;
* `pf_tag_array` holds four 26-bit tags, each with a tag-valid bit;
* `pf_data_array` holds four 128-bit lines, each with a separate data-valid bit.

Both arrays are flip-flops (80 bytes in all), read combinationally. A lookup
and a write can therefore happen in the same cycle.

The two valid bits mean different things:

| tag-valid | data-valid | meaning                                             |
|-----------|------------|-----------------------------------------------------|
| 0         | x          | entry empty or invalidated by a store               |
| 1         | 0          | line requested from memory, still **in flight**     |
| 1         | 1          | line present                                        |

A demand read that hits a line in flight is not sent to memory again. It
waits in state `DI` until the prefetch returns, and is then answered as a hit.

### Next-node address generation

`pf_addr_gen` has three multiplexers:

* `datanext_mux` picks word `offset[3:2]` of the data-array line (used on a read-cp hit);
* `memresp_mux` picks the same word of the line coming back from memory (used on a read-cp miss);
* `buffer_mux` chooses between the two.

The result is loaded into `buffer_addr_reg` (`buf_tag`, `buf_idx`). This is
why the cache passes the full word address, offset included, to the
prefetcher: the offset says which word of the line is the pointer. The
software convention is that the next pointer is the first field of a node.
Any offset works, though, because the offset comes from the `lw.cp` address.

### Requests to memory and `opaque`

All memory requests from the prefetcher are for whole, line-aligned
addresses (`{tag, idx, 4'b0}`). Its own traffic is tagged in the opaque
field:

* `opaque = 0`: a demand request, forwarded for the cache;
* `opaque = 1`: a next-node prefetch.

The memory is pipelined and returns responses in order. Responses with
opaque 1 are taken by a path that runs in parallel with the FSM. That path
writes the line into the data array at `buf_idx`, sets data-valid and clears
`in_fly`. Responses with opaque 0 belong to the FSM, which forwards them to
the cache. Only one prefetch can be in flight. If a new pointer is found
while `in_fly` is set, it is dropped.

### Control FSM

| state | name | what happens |
|------|------|--------------|
| `I`  | idle | `req_rdy=1`; the request is latched into `req_r` |
| `TC` | tag check / data access | `INIT` → `IN`. Read or read-cp hit with data present and the cache ready: respond with `resp_hit=1`; a read then accepts the next request (→ `TC`/`I`), a read-cp goes to `PN`. Hit whose data is missing or with the cache not ready → `DI`. Otherwise (read miss, read-cp miss, write) send the request to memory with opaque 0 → `WR` once `memreq_rdy`; a write that hits clears the entry's tag-valid bit |
| `IN` | init | writes tag and line with both valid bits, responds; waits while a prefetch is in flight |
| `DI` | data invalid | waits until the line is present and the cache is ready, then responds as in `TC` |
| `PN` | push next | if no prefetch is in flight, load `buffer_addr_reg` from the data array → `BM`; otherwise drop the pointer → `I` |
| `BM` | buffer to memory | send `{buf_tag, buf_idx, 0}` with opaque 1; in the same cycle write `buf_tag` into the tag array (tag-valid=1), clear data-valid, set `in_fly`, and accept the next request (`req_rdy=1`) → `TC`/`I` |
| `WR` | wait for memory | when the opaque-0 response arrives and the cache is ready, forward it (`resp_hit=0`). For a read-cp with no prefetch in flight, also latch the pointer from the response (`memresp_mux`) → `BM`; otherwise → `TC`/`I`. Cache not ready → `SM` |
| `SM` | stall memory | the response is held at the head of the memory pipe (`memresp_rdy=0`), which stalls the pipe, until the cache takes it |

### Timing

Cycle counts are from request acceptance. The memory pipe has `S` stages
(default 6).

| request | response to cache | other |
|---------|-------------------|-------|
| read hit | +1 (in `TC`) | next request can be accepted in the same cycle |
| read-cp hit | +1 | prefetch leaves at +3 (`PN`, `BM`); the next request is accepted at +3 |
| read or write miss | +1+S | memory request at +1. This is one cycle more than the cache talking to memory directly |
| read-cp miss | +1+S | prefetch leaves at +2+S |
| demand for a line in flight | when the prefetch returns, +1 | |

On a read-cp hit, the cache refills its line (`RU`, `RD` states) while the
prefetcher is in `PN` and `BM`. So the prefetch does not delay the processor.

## The caches (`rtl/blocking_cache.sv`)

The caches are direct-mapped, blocking, write-back and write-allocate, with
256 bytes in 16 lines of 16 bytes (`CACHE_BYTES`). They have a 32-bit
processor side and a 128-bit memory side. Each request is handled by an FSM:

* idle, then tag check;
* on a hit or an init: read, write or init data access, then wait;
* on a miss with a dirty victim: evict prepare → evict request → evict wait;
* on any miss: refill request → refill wait → refill update, then the read or write data access.

The response is always sent from the wait state, so a hit takes 3 cycles.
Two details matter to the prefetcher:

* a `READ_CP` miss is refilled with a `READ_CP` memory request;
* the refill request carries the full word address. Evictions are line-aligned `WRITE`s.

A dirty eviction therefore reaches the prefetcher as a write, and a write
that hits invalidates the stale copy in the prefetcher. This keeps the
prefetch buffer coherent with memory.

## Memory (`rtl/comb_mem.sv`, `rtl/mem_pipe.sv`)

`comb_mem` is a two-port test memory of `MEM_LINES` 16-byte lines (default
4096, 64 KiB; higher address bits wrap around). It answers each request in
the cycle it is presented. Its `req_rdy` is simply the downstream `resp_rdy`.

`mem_pipe` follows it on each port. It is an inelastic chain of `STAGES`
registers (default 6), so a request accepted in cycle *t* answers in cycle
*t+STAGES*, and one request per cycle can be accepted. If the last stage
holds a response nobody takes, the whole chain and the memory's request port
stall. `MEM_STAGES` on `pcp_system` sets the latency. Any value from 2
upward works; the original study varied it from 2 to 40 cycles.

## Parameters of `pcp_system`

| parameter | default | meaning |
|-----------|---------|---------|
| `CACHE_BYTES` | 256 | capacity of each cache (16-byte lines) |
| `PF_ENTRIES`  | 4   | prefetch buffer lines; the tag width follows (26 bits for 4) |
| `MEM_LINES`   | 4096 | memory size in 16-byte lines |
| `MEM_STAGES`  | 6   | memory latency in cycles |

`pf_hit` is an observation output. It pulses when the prefetcher answers the
data cache from its buffer.

## Measured effect on linked-list kernels

`tb_workloads` runs small kernels on two machines: `pcp_system`, and a
baseline in which the same data cache connects straight to the same
pipelined memory. A stand-in for the processor's data side issues one
request at a time. It waits 4 idle cycles between list nodes, for the loop's
other instructions. The cycle counts cover the data side only. They show the
trends, not the speedups of a whole processor.

The first test walks a 64-node list, one node per line, scattered over
memory:

| memory latency (cycles) | 2 | 5 | 7 | 10 | 20 | 40 |
|---|---|---|---|---|---|---|
| baseline cycles | 1024 | 1216 | 1344 | 1536 | 2176 | 3456 |
| with prefetcher | 962 | 965 | 967 | 970 | 1483 | 2763 |
| improvement | 6.4 % | 26.0 % | 39.0 % | 58.4 % | 46.7 % | 25.1 % |

Every node after the first is served from the prefetcher (63 hits). The
gain grows while the prefetch of the next node finishes within one node's
worth of work. Beyond about 10 cycles the next load has to wait in `DI` for
the line in flight. The gain then shrinks: the prefetcher can hide only
as much latency as the work between two nodes.

The other tests run at latency 6:

* **Two consecutive nodes per line.** The prefetcher fetches a line the
  cache already holds, so it never hits. It only adds its one-cycle
  pass-through cost: 1056 against 1024 cycles. With scattered nodes it is
  966 against 1280.
* **Insertion.** 16 nodes are inserted into a 64-node list, each after a
  walk from the head to a moving position, and the list is walked once at
  the end: 7484 against 9832 cycles, with 487 prefetcher hits.
* **Hash table.** 64 lookups run over 8 chains of 8 nodes, each walking a
  chain to the key: 5236 against 6176 cycles. The saving is smaller
  because the prefetch issued at the matching node is never used.
* **Vector add with no pointers**, at latencies 6 and 40. The prefetcher
  adds exactly one cycle to each of the cache's 240 refills and
  write-backs, and does nothing else.
* **A 6-node list walked 16 times.** Only the first walk misses in the
  cache, so the prefetcher is useful exactly 5 times; after that it costs
  nothing. A real program of that size also has other misses. Each of
  those would pay the one extra cycle, so the prefetcher can be a net loss
  for very small structures.

## What is the original design's and what is not

These follow the original design: the message layouts; the cache size,
organisation and FSM; the position of the prefetcher; the array sizes; the
three-mux address generator and the buffer address register; the state set;
the one-cycle hit; the use of opaque to separate prefetch from demand
traffic; one prefetch in flight with pointers dropped when busy; write
invalidation; and the inelastic pipelined memory.

These are choices made here where the original is silent:

* the type code of `READ_CP`;
* line-aligned memory addresses, and a read-cp miss sent to memory as a plain read;
* responses that echo type, opaque and len;
* the hit flag as the side-band `resp_hit` rather than a message field;
* one `DI` state for both "data in flight" and "cache not ready" on a hit;
* init waiting for in-flight prefetches;
* whole-word accesses only in the cache;
* memory size, partial-write rule and latency default (6, the latency seen in the original's waveforms);
* synchronous active-high reset of all control state and valid bits. Data arrays and memory are not reset.

The original text disagrees with itself in two places:

* **Opaque values.** One passage gives opaque 1 to demand requests and 0 to
  prefetches. The control description and the datapath diagrams use the
  reverse. The RTL uses prefetch = 1, demand = 0.
* **Read-cp miss path.** One passage sends a read-cp miss from the wait
  state to push-next. The datapath diagram and another passage latch the
  pointer straight from the memory response and send it the next cycle. The
  RTL does the latter: `WR` → `BM`.

Not included:

* the five-stage processor with the `lw.cp` decoder. Its ISA encoding is not
  available, so its cache ports are left as ports of the top;
* a prefetcher on the instruction side. Only data loads can be `lw.cp`, so
  the instruction cache talks to memory directly.

## Verification

Each testbench in `tb/` checks itself and ends by printing
`TB_RESULT checks=N failures=M`.

| testbench | covers |
|-----------|--------|
| `tb_pf_tag_array`, `tb_pf_data_array`, `tb_pf_addr_gen` | array semantics, valid bits, word selection, random sequences against reference models |
| `tb_prefetcher` | the six basic paths (read hit and miss, read-cp hit and miss, write hit and miss) with data, hit flag, prefetch address and opaque, and exact latencies; a read of a line in flight; a 32-node `lw.cp` traversal where every node after the first must hit; a dropped pointer; 400 random requests with sink back-pressure (reaching `SM`) against a reference memory |
| `tb_blocking_cache` | init plus hits (3 cycles, no memory traffic); read-cp refill type and address; write-allocate; dirty write-back; 1500 random accesses over conflicting lines |
| `tb_comb_mem`, `tb_mem_pipe` | same-cycle response, partial writes; in-order delivery, exact latency, stall behaviour |
| `tb_workloads` | the kernels of the previous section; checks data, the hit counts, which machine is faster, and the exact one-cycle overhead |
| `tb_pcp_system` | whole system at default parameters. One thread fetches instructions, another plays the processor's data side: a 64-node list traversal, 16 insertions into it, then a re-traversal, hash-bucket lookups (also two buckets walked alternately), and random loads and stores. Every value is checked, and each prefetcher mechanism must occur. A typical run shows 63 of 64 traversal nodes served from the prefetcher |

The `SM` state cannot occur inside `pcp_system`, because the cache is
always ready while it waits for a refill. `tb_prefetcher` exercises it with
a slow sink.

Parameters changed by testbenches:

* `tb_comb_mem` uses a 64-line memory;
* `tb_workloads` sets `MEM_STAGES` of `pcp_system` (2 to 40);
* all others, `tb_pcp_system` included, use the defaults of the block under test;
* memories and pipes that only serve as test fixtures, around a single prefetcher or cache, use their own sizes.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/pcp_pkg.sv tb/tb_pcp_system.sv \
          --top-module tb_pcp_system -Mdir obj && ./obj/Vtb_pcp_system
```

The testbenches assume two-state simulation. Everything they read is reset
or written first. Memory images are written into `u_mem.mem` by
hierarchical reference.
