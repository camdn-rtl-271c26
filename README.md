# NPU-controlled regions in a shared last-level cache

When many neural networks run side by side on the NPUs of a system-on-chip, they all go through the same last-level cache. A hardware-managed cache handles their data badly for two reasons. Much of a DNN's traffic is used once and then evicts data that would have been reused. The data that is reused comes back after megabytes of other traffic, so LRU-style replacement has usually evicted it by then. Several models running at once make both problems worse.

The design in this repository gives the NPUs explicit control over part of the cache. Its parts are:

* **Way partitioning.** Each cache slice has a *way mask register*. The ways the mask leaves set stay a normal, hardware-managed cache for the CPUs. The other ways form the *NPU subspace*. The CPU-side controller never hits in, allocates in, or evicts from the NPU subspace.
* **NPU-controlled access.** Each slice has an *NPU-exclusive controller* (NEC). It executes explicit line-granular commands on the NPU subspace: move a line between memory and cache, between cache and NPU, or around the cache. There are no tags, no misses and no replacement policy. The NPU program decides what stays.
* **Virtual cache addressing.** The NPU subspace is cut into 32 KB pages. Each NPU's DMA engine has a *cache page table* (CPT) that maps its model's virtual cache pages to physical cache pages. Each model therefore gets a private region that other models cannot disturb, and the runtime can grow or shrink that region by rewriting the tables.
* **Bypass and multicast.** Data that will not be reused can go straight between memory and the NPU. One request can deliver a line to a whole group of NPUs running the same model.

The RTL covers the shared-cache side of such a system: NPU DMA request generators with their page tables, the crossbar, and the cache slices with both controllers. It does not include the NPU compute, the CPUs, the memory controllers, or the runtime software that decides how many pages each model gets. Their signals are ports of the top level (`camdn_top`).

## Default configuration

| | value | origin |
|---|---|---|
| NPUs (DMA engines with a CPT each) | 16 | evaluated configuration |
| Shared cache | 16 MB, 8 slices, 16 ways | evaluated configuration |
| NPU subspace | 12 of 16 ways (ways 4-15), 12 MB | 12/16 from the evaluated configuration, which ways are NPU ways is this design's choice |
| Page size / CPT entries | 32 KB / 512 | as described for a 16 MB cache |
| Line size | 64 bytes | this design's choice |
| Sets per way per slice | 2048 | follows from the above |
| CPU request ports | 2 | this design's choice |
| Memory address width | 32 bits | this design's choice |

All of these are parameters of `camdn_top` or constants in `camdn_pkg`. The testbenches run a reduced copy with 4 NPUs, 2 slices and 4 ways × 16 sets, plus one run at full size.

## Cache addresses and pages

A line in the NPU subspace is named by a **physical cache address** (`pcaddr`). From the lowest bit up it holds the byte offset, slice index, set index and way index:

```
 pcaddr (24 bits, 16 MB)
 23      20 19              9 8     6 5        0
+----------+-----------------+-------+----------+
|   way    |       set       | slice |  offset  |
+----------+-----------------+-------+----------+
|<------ pcpn (9) ------>|<------ page offset (15) ------>|
 23                    15 14                              0
```

The slice bits sit just above the line offset, so consecutive lines go to successive slices and a page is spread over all eight slices. A 32 KB page is 512 lines: 64 consecutive sets of one way in each slice. The **physical cache page number** (`pcpn`) is therefore `{way, set[10:6]}`. Way *w* holds pages 32·*w* to 32·*w*+31. With the default mask the NPU pages are 128 to 511, 384 pages in all.

An NPU program addresses its own **virtual cache address** space (`vcaddr`, 24 bits as well). The DMA replaces the top 9 bits, the virtual page number `vcpn`, with the `pcpn` from its CPT and keeps the 15-bit page offset. The table entry is a valid bit and a 9-bit `pcpn`, stored as 512 × 9 bits of memory plus 512 valid flip-flops. The runtime fills the table through the `npu_cpt_wr_*` ports whenever it changes a model's allocation. A model spread over several NPUs gets the same mappings in each of their tables.

The hardware does not check that a `pcpn` points into the NPU subspace. Keeping the page tables and the way mask consistent is the runtime's job.

## The request set

Every request moves one 64-byte line. A request carries both addresses that may be involved: `pcaddr` for the cache and `paddr` for memory.

| op | from → to | uses `pcaddr` | uses `paddr` | response |
|---|---|---|---|---|
| `OP_READ` | cache → NPU | yes | – | line |
| `OP_WRITE` | NPU → cache | yes | – | acknowledgement |
| `OP_LOAD` | memory → cache | yes | yes | acknowledgement |
| `OP_STORE` | cache → memory | yes | yes | acknowledgement, after the line has left for memory |
| `OP_BYP_READ` | memory → NPU | – | yes | line |
| `OP_BYP_WRITE` | NPU → memory | – | yes | acknowledgement, after the line has left for memory |
| `OP_MC_READ` | cache → NPU group | yes | – | line, to every NPU in `mcast` |
| `OP_MC_BYP_READ` | memory → NPU group | – | yes | line, to every NPU in `mcast` |
| `OP_CPU_RD` / `OP_CPU_WR` | normal cached read / write | – | yes | line / acknowledgement |

Read, write, load and store are the basic moves between memory, cache and NPU. Bypass keeps single-use data out of the cache. Multicast replaces identical reads from the NPUs of one model with a single request. The issuing NPU puts the group in the descriptor's `mcast` mask, and its own bit is added automatically. The response crosses the slice port once, and the crossbar copies it to every NPU in the mask.

Each request gets a response, including writes. This lets a DMA know when a transfer has completed. A store or bypass-write is acknowledged only after its line has entered the memory controller. A read issued afterwards through another slice therefore sees the new data.

## How a request travels

```
 NPU i: npu_dma ── CPT ──┐                            ┌── cache_slice s ─────────────────────────┐
 ...                     ├─ xbar ── slice port ──────►│ dual_interface ─┬─ cache_ctrl ─┬ tag_array│
 CPU j: cpu_req ─────────┘  (route by slice bits)     │                 │  (way mask)  │          │
                                                      │                 └─ nec ────────┴ data_array
                                                      │                   (arbitrated)           │
                                                      │            mem_port_arb ── mem_req/resp ─┼──► memory controller
                                                      └──────────────────────────────────────────┘
```

1. **`npu_dma`** accepts a descriptor: op, starting `vcaddr`, starting `paddr`, number of lines, and multicast group. For each line it reads the CPT in one cycle and then issues the request. With a free interconnect that is one line every two cycles. The line number goes out as the request's `tag` and returns with the response. Read data leaves on `rd_valid/rd_tag/rd_data` and can be placed in the scratchpad in any order. If a page is unmapped, its lines are skipped and `fault` is set at the end. For a write transfer the skipped lines' data is still consumed. `done` pulses once every issued line has been answered. Bypass ops ignore the translation.
2. **`xbar`** sends each request to the slice selected by bits [8:6] of its address. NPU cache ops use `pcaddr`. CPU ops and bypass ops use `paddr`, because bypass ops have no cache address. Each slice arbitrates round-robin among the masters. A response goes to every master set in its destination mask. The slice stays busy until every destination has taken the response. Masters always accept responses.
3. **`dual_interface`** sends `KIND_NORMAL` requests to the cache controller and `KIND_NPU` requests to the NEC. It merges their responses, alternating between the two sides when both are waiting.
4. **`nec`** has a request queue, a decode step, one state machine, a memory-request queue, a mux that selects data-array write data from the request or from memory, and a response queue. It handles one request at a time.
5. **`cache_ctrl`** is a plain blocking, write-back, write-allocate cache for whole lines. It differs from an ordinary cache in one way: hits and victims are limited to the ways set in `way_mask`. A victim is the first invalid allowed way, otherwise the next allowed way in round-robin order. If no way is allowed, CPU requests go straight to memory.
6. The two controllers share the single-port **`data_array`** through a round-robin arbiter. They share the slice's memory port through **`mem_port_arb`**, which records which client each read belongs to. Memory answers reads in order.

## Timing

All interfaces use valid/ready handshakes. A transfer happens on a clock edge where both are high. Data must stay stable while valid is high and ready is low, and assertions in `nec` and `npu_dma` check that rule. Storage is synchronous: the CPT, the data array and the tag array return read data one clock after the read.

With no contention, latencies counted in clock edges after the edge that accepts the request:

* NEC `OP_READ`: response valid after 4 edges.
* CPU read hit: 3 edges. CPU write hit: 2 edges.
* Memory-side operations add the memory latency. A CPU miss with a dirty victim adds one write-back.
* DMA issue rate: one line per 2 cycles.

The full-size run gives a sense of the throughput. A 512-line (one page) `OP_LOAD` takes about 1130 cycles with 8-cycle memory. A 512-line multicast read to four NPUs takes about 1040 cycles. In both cases the DMA's two-cycles-per-line issue is the limit.

## Reset and configuration

`rst_n` is an active-low asynchronous reset. It clears all CPT valid bits, all tag valid bits and all queues. The way mask resets to `WAY_MASK_RST`, which is `16'h000F` by default: bit *i* set means way *i* belongs to the CPUs. `wm_we`/`wm_wdata` rewrite the mask in every slice at once. Changing the mask does not flush anything. Before giving a way back to the CPUs, the runtime must have unmapped any NPU pages in that way. Before taking a way from the CPUs, it must make sure that no dirty CPU line is left in that way.

## Files

`rtl/`:

| file | contents |
|---|---|
| `camdn_pkg.sv` | sizes, opcodes, request/response/descriptor structs, helper functions |
| `camdn_top.sv` | the whole shared-cache subsystem |
| `npu_dma.sv`, `cpt.sv` | DMA request generator and its page table |
| `xbar.sv` | crossbar, round-robin, multicast response fan-out |
| `cache_slice.sv` | one slice: way mask register, arbiters, the blocks below |
| `dual_interface.sv`, `nec.sv`, `cache_ctrl.sv` | slice port split, NPU controller, CPU-side controller |
| `tag_array.sv`, `data_array.sv` | slice memories, written as arrays (replace with SRAM macros for implementation) |
| `mem_port_arb.sv`, `fifo.sv`, `rr_arb.sv` | shared helpers |

`tb/` has one self-checking testbench per block (`tb_<block>.sv`) and two system testbenches:

* `tb_camdn_top` is the reduced system with two models, a multicast group, CPU traffic, memory back-pressure, an unmapped page and a way-mask switch. It counts every mechanism and fails if any of them never happened.
* `tb_camdn_full` runs the default-size system through loading a page of weights, multicasting it to four NPUs, a write/read/store by a second model, and a bypass read of what was stored.
* `tb_camdn_mt` runs the multi-tenant pattern at the default size. Eight models run at once on two NPUs each, each with two private pages. Every model does one layer's worth of data movement: load weights, multicast them, multicast-bypass-read inputs, write/read/store outputs, bypass-write partial sums. CPU traffic runs alongside. Afterwards each model's weights must still be intact in its pages. The eight models together take about 5300 cycles.

`mem_model.sv` and `mem_multi.sv` are behavioural memories that answer in order. `mem_multi` shares one store between all slices. `tb_pkg.sv` holds the data pattern: a line never written reads as its address XOR the word index XOR `0x5A5A0000` in every 32-bit word.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/camdn_pkg.sv tb/tb_pkg.sv tb/tb_camdn_top.sv \
          --top-module tb_camdn_top -Mdir obj_top -o sim
./obj_top/sim
```

Each testbench ends with a line `TB_RESULT checks=N failures=M` and has a cycle watchdog. The full-size build needs about 30 s and 300 MB. It simulates in seconds.

## What follows the source architecture and what does not

Taken from the architecture as published:

* the split into a way-partitioned general-purpose subspace and an NPU subspace, controlled by a per-slice way mask register;
* a per-slice NPU-exclusive controller next to the normal controller, behind a dual interface;
* the eight line-granular NPU semantics;
* per-NPU page tables inside the DMA with 32 KB pages, 512 entries, and a valid bit plus page number per entry;
* the `pcaddr` field order and the spreading of consecutive lines over slices;
* the 16-NPU, 16 MB, 8-slice, 12-of-16-way configuration.

This design's own choices, because the source says nothing about them:

* the 64-byte line and 32-bit memory address;
* all message formats and opcode encodings;
* which ways are NPU ways, and the mask polarity: the source says the register masks off the NPU ways, and here a set bit marks a way the CPU-side controller may use;
* the crossbar;
* all arbitration;
* the blocking, one-request-at-a-time controllers;
* queue depths;
* the acknowledgement for every request;
* how multicast groups are expressed, as a destination mask in one request from one member;
* how bypass requests choose a slice;
* skipping unmapped pages;
* the DMA descriptor format and issue rate;
* the whole CPU-side cache controller, which the source only names.

Not included:

* the NPU compute, CPUs, memory controllers and DRAM;
* the offline mapping tool, which produces per-layer tables of mapping candidates for several cache budgets;
* the online allocation algorithm, which predicts how many pages will be free, picks a candidate per layer, requests pages and rewrites the CPTs. These two are software.

What that software needs from the hardware is here: page tables it can rewrite, way masks it can set, and the semantics its generated NPU instructions use.

Sizes are fixed by the package for the 16 MB configuration. Caches up to 16 MB can be built by lowering `SETS`. Larger caches (32 or 64 MB) need wider `CADDR_W`/`CPN_W` constants in `camdn_pkg`.

## How far to trust it

Each block's testbench compares it with a separate reference model, under random traffic and back-pressure where that applies. Each testbench was also run against a deliberately broken copy of its block and caught the fault. The system testbenches check data end to end against a memory model.

There are limits. The controllers have not been checked for deadlock under every traffic pattern. They were checked only under the mixes above. The memory model answers each port in order with a fixed latency. Nothing has been taken through timing closure. The storage arrays stand in for SRAM macros. The 32 K tag valid flip-flops per slice, which make reset clear the cache in one cycle, would normally be replaced by a reset sweep.
