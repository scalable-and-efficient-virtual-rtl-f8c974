# Shared virtual memory for an accelerator cluster: a software-managed IOMMU and a DMA engine that survives TLB misses

A many-core accelerator that sits next to a host CPU in a system-on-chip works best when it can
follow the host's pointers directly. That requires *shared virtual memory*: the accelerator issues
the host's virtual addresses, and an IOMMU between the accelerator and main memory translates them
to physical addresses. Full hardware page-table walkers are expensive and slow on an accelerator
with many independent masters. The design here keeps the IOMMU small instead. It holds only
TLBs, which are filled entirely by software running on the accelerator's own cores.

The IOMMU never waits for a page-table walk. A transaction whose page is not in the TLB is answered
at once with an error and dropped. Everything else rests on that rule:

* **Prefetch transactions.** A core can send a read or write with an AXI user bit set. It means
  "tell me whether this page is mapped". If it is, the IOMMU answers OKAY itself and nothing
  reaches memory. If it is not, the error response tells a helper thread to set up the entry
  before the worker threads need it.
* **Miss handling by software.** Miss-handling threads on the accelerator's cores walk the page
  tables and write translations into the TLBs. Several such threads can work on different pages
  in parallel.
* **A DMA engine that tolerates misses** (the *vDMA*). A DMA transfer may touch many pages, and
  any of its bursts may come back with an error. The engine records the metadata of every burst
  in flight in a small *retirement buffer*, not its data. When a burst fails, the engine stops
  issuing, lets the other bursts finish, reports the failing address to software, and reissues
  the failed bursts once software has mapped their pages. Without this, software would have to
  lock every TLB entry a transfer needs before starting it.

This repository holds synthesizable SystemVerilog for one accelerator cluster's path to shared
memory: the DMA engine with its retirement buffer, a two-port AXI multiplexer standing in for the
cluster's network, and the two-level-TLB IOMMU. The cores, the L1 scratchpad memory, the host and
main memory are outside; they appear as ports and, in the testbenches, as behavioural models.

```
           PE command ports (8)    failed-address register     L1 SPM ports (write, read)
                   |                       |                         |
             +-----v-----------------------v-------------------------v------+
             |  vdma: arbiter -> command queue -> splitter -> issue reg      |
             |        retirement_buffer (8 bursts)   read / write data paths |
             +------------------------------+--------------------------------+
                                            | AXI (3-bit IDs)
   core port (PE loads, stores,             |
   prefetches; AXI, 4-bit IDs) ----+        |
                                   v        v
                             +-------------------+
                             |     axi_mux2      |  ID bit 3 = port
                             +---------+---------+
                                       | AXI, virtual addresses
                             +---------v---------+     TLB configuration
                             |   hybrid_iommu    |<--- writes from the
                             |  rab_l1_tlb (32)  |     miss-handling software
                             |  rab_l2_tlb (256) |
                             +---------+---------+
                                       | AXI, physical addresses
                                       v
                          system interconnect / shared DRAM
```

All addresses are 32 bits and pages are 4 KiB, so a page number is 20 bits. AXI data is 64 bits.
The shared types (`ax_t`, `w_t`, `r_t`, `b_t`, `dma_cmd_t`, `burst_meta_t`) are in `rtl/svm_pkg.sv`.

## Address translation

### The two TLBs

`rab_l1_tlb` holds 32 translations and is fully associative. It is compared combinationally, so a
hit costs no cycle. `rab_l2_tlb` holds 256 translations in 32 sets of 8 ways. The set is the low
5 bits of the virtual page number. The L2 is searched only when the L1 misses. It compares two
ways per cycle and stops at the first match. Counted from the cycle the request is accepted to the
cycle with the result, that takes 3 cycles for a hit in way 0 or 1, then one more cycle per
further pair of ways, and 6 cycles for a miss.

Neither TLB is ever written by hardware: an L2 hit is not copied into the L1. Software decides
which entries go where, and per-set replacement is its job too. In the testbenches the miss
handler keeps one round-robin counter per L2 set.

### Configuration writes

The TLBs are written through a plain write port: `cfg_we`, a 10-bit `cfg_addr` and 32-bit
`cfg_wdata`. A translation does not fit in one 32-bit word, so each entry takes two writes:

| `cfg_addr` bits | meaning |
|---|---|
| 9 | 0 = L1 TLB, 1 = L2 TLB |
| 8:1 | entry: L1 index 0..31, or L2 `{set[4:0], way[2:0]}` |
| 0 | 0 = word 0, 1 = word 1 |

| word | contents |
|---|---|
| 0 | bit 31 = valid, bits 19:0 = virtual page number |
| 1 | bits 19:0 = physical page number |

Write word 1 first and word 0 (with valid) last. The entry then never shows a valid tag with a
stale physical page. To remove an entry, write word 0 with the valid bit clear. If two L1 entries
hold the same page, the lower index wins.

### What the IOMMU does with a transaction

`hybrid_iommu` has one translator for both reads (AR) and writes (AW). When both are waiting it
alternates between them, and it handles one address at a time.

| transaction | L1 hit | L2 hit (L1 missed) | miss in both |
|---|---|---|---|
| normal | forwarded in the same cycle, physical page substituted | forwarded 1 cycle after the L2 result | answered SLVERR, dropped |
| prefetch (`user` = 1) | answered OKAY locally | answered OKAY locally | answered SLVERR, dropped |

* **Local answers.** A local read response has the full burst length and data 0. For a local
  write response the IOMMU first swallows the write data beats, then sends one B response.
* **Ordering.** A local response waits until every forwarded transaction of the same direction
  has been answered. Responses therefore never overtake each other, and a master never sees its
  responses reordered.
* **Write data.** W beats follow the AW order. A small queue (8 entries) records for each accepted
  AW whether its data is forwarded or dropped.
* **Hold on back-pressure.** If a same-cycle forward finds memory not ready, the translated
  address is registered and held until memory takes it. The downstream AR/AW therefore always
  stays stable while valid; assertions check this.

An L1 hit forwards with no added latency. An L2 hit adds the search time. A miss costs the
search plus the work of software.

## The DMA engine (`vdma`)

### Commands and completion

Each of the 8 PEs has its own command interface:

* `cmd_valid[p]` / `cmd_ready[p]`, and `cmd[p]` with a virtual address, an L1 byte address, a
  length (8 bytes to 64 KiB, a multiple of 8) and a direction.
* A round-robin arbiter accepts one command per cycle into a 4-entry queue.
* The accepted command gets a 3-bit transfer ID, returned on `cmd_id` in the cycle of the
  handshake.
* At most 8 transfers can be open. A new command waits while its ID is still in use.
* When every burst of a transfer has completed successfully, `done_valid` pulses for one cycle
  with `done_pe` and `done_id`.

### Splitting into bursts

The splitter cuts a transfer into AXI bursts. Each burst ends at the first of:

* the end of the transfer;
* 2 KiB (256 beats);
* the next 4 KiB page boundary.

A burst therefore lies within one page and needs one TLB entry, and only at the moment it is
issued. A 64 KiB transfer that starts inside a page touches 17 pages, and the engine gets through
it without any TLB entry being locked.

### Issue

Bursts pass through a one-entry issue register onto AR or AW. Each burst takes the next value of
a 3-bit AXI ID counter, and up to 8 bursts are in flight.

* **Reads.** Read data goes to L1 through the write port (`l1w_*`, with a grant). The L1 address
  comes from the burst's retirement-buffer entry plus 8 bytes per beat, so reads with different
  IDs may interleave.
* **Writes.** Write data is fetched from L1 through the read port (`l1r_*`). Data arrives one
  cycle after the grant and passes through a two-beat buffer onto W.

The L1 port addresses are 18-bit byte addresses, covering a 256 KiB scratchpad.

### The retirement buffer

`retirement_buffer` has one entry per burst that may be in flight (8). Each entry holds:

* the external (virtual) address, 32 bits;
* the L1 address of the 32-bit word, 16 bits;
* the AXI length, 8 bits;
* the AXI ID, 3 bits;
* the transfer ID, 3 bits;
* the read/write flag;
* a 3-bit state;
* a 3-bit next pointer.

The entries form a singly linked list from a head (oldest) to a tail (youngest) pointer, so list
order is issue order. Entry states:

```
  FREE --push--> IN FLIGHT --OKAY--> FREE
                    |
                  error
                    v
                 FAILED --PE reads register--> PEEKED
                    |                            |
                    +------PE writes page--------+
                                   v
                              REISSUABLE --reissued--> (entry freed, burst pushed
                                                        again as IN FLIGHT at the tail)
```

* **Completion.** The list is walked from the head to the first in-flight entry with the
  response's AXI ID, and that entry is updated. The walk is needed because an ID can repeat
  among in-flight bursts after a reissue, and AXI only keeps order within one ID.
* **Unlinking.** A retired entry is unlinked wherever it sits in the list.
* **Size.** The buffer holds 8 × 2 KiB = 16 KiB of bursts in flight. A conventional design
  would buffer the data itself, so other masters could keep using the bus while those bursts
  wait on a miss. Here each burst costs only its metadata, about 70 bits.

### Stop, drain, reissue

The control unit runs a simple policy:

1. While no burst has failed, issue normally.
2. When any burst has failed, issue nothing new. At most the one burst already in the issue
   register still goes out.
3. Wait until no burst is in flight (*drained*).
4. From then on, whenever a burst is *reissuable*, reissue the oldest one with a new AXI ID.
   This continues even while earlier reissues are still in flight.
5. When no burst is failed, peeked, reissuable or in flight any more, return to step 1.

Draining first has two effects. A burst that failed is never overtaken by younger bursts of the
same transfer, and the buffer always holds exactly the set of bursts software must care about.

### The software side: one register

`reg_req` / `reg_we` / `reg_wdata` / `reg_rdata` form one register. It is combinational to read
and takes effect on the clock edge.

* **Read:** returns the external address of the oldest FAILED burst, or 0 if there is none. Every
  failed burst on that page becomes PEEKED, so the next read, possibly by another miss-handling
  thread, returns a different page.
* **Write** a virtual address: every FAILED or PEEKED burst on that page becomes REISSUABLE.

A miss-handling thread loops like this:

```
loop:
    va = read(dma_reg)                 // 0: nothing to do
    if va == 0: also serve the software miss queue of the cores; continue
    pa = walk_page_tables(va)          // in host memory, through the IOMMU's own mappings
    set = (va >> 12) & 31
    way = next_way[set]++ % 8          // per-set replacement counter (atomic if shared)
    cfg_write(L2, set, way, word 1, pa >> 12)
    cfg_write(L2, set, way, word 0, valid | (va >> 12))
    write(dma_reg, va)                 // bursts on that page become reissuable
```

Cores handle their own misses differently. A load that gets SLVERR puts its address into a
software queue and waits, and a miss-handling thread serves that queue the same way. A prefetch
thread issues prefetches ahead of the worker threads and queues the pages whose prefetch failed.
This software is not part of the RTL; the testbenches contain behavioural versions of the miss
handler.

## The cluster network stand-in (`axi_mux2`)

This block joins two AXI masters onto the IOMMU: the DMA engine on port 0 and the cores on
port 1.

* AR and AW are each granted round robin.
* The port index is placed in bit 3 of the AXI ID. Masters must keep that bit 0. The DMA uses
  3-bit IDs, and the core port must do the same.
* R and B responses are routed back by that bit, which is cleared on the way out.
* W beats follow the order of granted AWs, kept in an 8-entry queue.

## Top level (`svm_top`)

| parameter | default | meaning |
|---|---|---|
| `N_PE` | 8 | PE command interfaces of the DMA |
| `N_INFLIGHT` | 8 | bursts in flight = retirement buffer entries |
| `MAX_BURST_BYTES` | 2048 | longest burst |
| `PAGE_BYTES` | 4096 | page size; bursts never cross a page |
| `L1_TLB_ENTRIES` | 32 | L1 TLB size |
| `L2_TLB_SETS`, `L2_TLB_WAYS` | 32, 8 | L2 TLB geometry (256 entries) |

| port group | direction | meaning |
|---|---|---|
| `dma_cmd_*[N_PE]`, `dma_cmd_id_o` | in/out | per-PE transfer commands |
| `dma_done_*` | out | transfer completion event (PE, transfer ID) |
| `dma_reg_*` | in/out | failed-address / handled-page register |
| `l1w_*`, `l1r_*` | out/in | DMA ports into the L1 scratchpad (18-bit byte address, 64-bit data) |
| `core_ar/aw/w/r/b` | AXI slave | loads, stores and prefetches of the PEs (`user` = prefetch) |
| `iommu_cfg_*` | in | TLB configuration writes |
| `mem_ar/aw/w/r/b` | AXI master | to the system interconnect, physical addresses |

There is one clock (`clk_i`) and one active-low asynchronous reset (`rst_ni`). Reset clears every
TLB valid bit, all queues and the retirement buffer.

## What is this design's own

These sizes and behaviours come from the published description:

* TLB sizes and organisation: a single-cycle 32-entry fully associative L1 and a 256-entry 8-way L2
  of up to 6 cycles, both written by software.
* The drop-with-error rule and the prefetch semantics.
* The DMA parameters: per-PE command interfaces, 64 KiB transfers, 2 KiB bursts, 8 bursts in
  flight.
* The retirement buffer: a linked list with head and tail, the five states, lookup of the first
  matching entry from the head, and the metadata widths. The 16-bit local address is taken as a
  32-bit-word address, which covers exactly a 256 KiB L1.
* The stop, drain and reissue policy, and the register protocol.

These are choices made here:

* The burst boundary rule (2 KiB or the page end, whichever comes first).
* The configuration address map and entry word layout.
* The L2 set index and its two-ways-per-cycle search.
* One shared translator for reads and writes, and the response-ordering rule.
* SLVERR as the miss code, and zero data in local prefetch answers.
* The command queue and the ID counters.
* Separate L1 read and write ports, where a real cluster would go through its L1 interconnect.
* Matching completions only against in-flight entries.
* The two-port multiplexer.

Where the published description disagrees with itself, this design takes the later, final
version. One architecture overview mentions a hardware queue of missing addresses in the IOMMU,
but the implementation replaces it with a software queue filled by the cores. This IOMMU has no
hardware miss queue.

Not included: the host, the system interconnect and DRAM, the PEs and their scratchpad and
instruction cache, the event unit, multiple clusters, and all of the helper-thread software.

## Simulation

Every block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. `tb/axi_mem_model.sv` is a behavioural
memory behind the IOMMU. An unwritten 64-bit word at byte address `a` reads as `{a, ~a}`, so
expected data can be computed without a reference copy.

| testbench | what it exercises |
|---|---|
| `tb_rab_l1_tlb` | random fills, lookups against a reference copy in the same cycle, invalidation, reset |
| `tb_rab_l2_tlb` | entries in chosen sets and ways, hit latency per way (3 + way/2 cycles), misses (6 cycles) |
| `tb_hybrid_iommu` | same-cycle L1 forward, L2 forward within 6 cycles, read and write misses, prefetch hit and miss, translated addresses and data at memory, dropped and prefetch transactions never reaching memory |
| `tb_retirement_buffer` | random push, complete, fail, peek, handle and reissue against a reference list |
| `tb_vdma` | four transfers from four PEs over a memory with random L1 grants, misses handled by a software model, page splitting, data in both directions, no new issue during a failure |
| `tb_axi_mux2` | writes and read-backs from both ports at once, responses routed to the right port with the right ID, both ports granted under contention |
| `tb_svm_top` | the whole path at default sizes; see below |

`tb_svm_top` runs the top level with no parameter overrides. It includes:

* core loads that hit in the L1 TLB, hit in the L2 TLB, and miss;
* prefetches that hit and that miss, then hit after the miss handler has mapped the page;
* five concurrent DMA transfers from five PEs, up to 32 KiB and 8 pages each, at L1 addresses up
  to 256 KiB;
* core traffic competing with the DMA in the multiplexer;
* a miss handler that polls the register, maps pages into the L2 TLB and reports them.

It checks all data in L1 and memory. It counts each mechanism: L1 hit, same-cycle forward, L2
hit, dropped miss, prefetch hit and miss, failed burst, stall, peek, reissue, page split,
contention, concurrent commands and completions. A mechanism that never occurred counts as a
failure.

`tb_svm_workloads` runs small versions of the two kinds of application the design is meant
for, again on the unmodified top level. Threads model the software of the eight PEs: workers,
miss handlers and a prefetcher.

* **Pointer chasing.** 64 linked vertices over about 140 pages. A worker loads a vertex header,
  DMA-copies its payload, follows the successor pointers and DMA-writes the result to each
  successor. It runs with 6 workers + 2 miss handlers, and with 5 workers + 1 prefetcher +
  2 miss handlers.
* **Stream processing.** 24 blocks of 8 KiB. Each worker double-buffers its blocks in L1.

Every output word is checked. The testbench prints cycles, misses and prefetch outcomes per
configuration. With the prefetcher, pointer chasing needs about 10 to 13 % fewer cycles in this small
setting (about 44k instead of 49k to 51k cycles, depending on the random seed).

To run a testbench with Verilator 5, list the package first:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/svm_pkg.sv rtl/rab_l1_tlb.sv rtl/rab_l2_tlb.sv rtl/hybrid_iommu.sv \
  rtl/retirement_buffer.sv rtl/vdma.sv rtl/axi_mux2.sv rtl/svm_top.sv \
  tb/axi_mem_model.sv tb/tb_svm_top.sv --top-module tb_svm_top -o sim
./obj_dir/sim
```

Replace `tb_svm_top` with any other testbench name. The design has no vendor primitives. The
TLBs and the retirement buffer are flip-flop arrays; a larger L2 TLB would normally be mapped to
SRAM, which would change its search timing.
