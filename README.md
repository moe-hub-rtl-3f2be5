# MoE-Hub: a GPU hub that lets Mixture-of-Experts tokens travel by name

In a Mixture-of-Experts layer spread over several GPUs, every token goes to the
GPUs that host its chosen experts (dispatch), and the results come back
(combine). Done in software, the sender has to know where on the receiving GPU
each token goes before it can write it. Finding that out takes a
count-exchange-prefix-sum round before any data can move, so compute and
communication cannot overlap well.

MoE-Hub moves that bookkeeping into the GPU's hub, the block between the
on-chip crossbar and the NVLink ports:

* The **producer** does not compute a destination address. It writes each
  token row with a new store, `st.rowsp`, that names only a logical
  destination: a region (MallocID), a row (RowID) and a byte offset inside the
  row (RowOffset).
* The **producer hub** merges these stores into 128-byte link packets and
  schedules them.
* The **consumer hub** hands each arriving row the next free slot of its region
  (the LocalRowID). Rows land packed densely in arrival order at
  `BaseAddr + LocalRowID * RowSize + RowOffset`.
* The consumer hub also counts the data that has arrived for each thread-block
  (TB) group of the next kernel. It tells the TB dispatcher which groups may
  start before the whole exchange is over.

This repository holds synthesizable SystemVerilog for that hub, one testbench
per block, and an end-to-end testbench of two hubs running a small token
dispatch.

```
 SM stores ─► rowsp_decode ─► rpm ─► packetizer ─► tx flits ──► link / switch
                                       ▲ dst_ready (per destination GPU)

 link ─► rx flits ─► depacketizer ─┬─► aau (st.rowsp) ──┬─► XBAR write ─► memory
                                   └─► bypass FIFO (st.) ┘        │
                                                                  ▼ ack
 driver MMIO ─► hub_mmio ─► aau (regions), dam (tables, thresholds)
                                   dam ─► tb_ready / all_ready / tb_dealloc ─► TB dispatcher
 aau ◄──► RAT spill area in device memory (sp_req / sp_rsp)
```

## Row-sparse stores

A `st.rowsp` store carries one 64-bit destination register (`moehub_pkg`):

| bits  | field     | meaning |
|-------|-----------|---------|
| 63:56 | MallocID  | `[7:4]` target GPU, `[3:0]` region on that GPU |
| 55:36 | RowID     | row name chosen by the producer, e.g. `token * topk + k` |
| 15:0  | RowOffset | byte offset inside the row, 32-byte aligned |

Two kinds of store enter the hub:

* A conventional remote store (`st.`) keeps its byte address. It also keeps the
  peer GPU that the L1 TLB found.
* For `st.rowsp`, `rowsp_decode` takes the target GPU from the upper MallocID
  bits on a path beside the TLB, so ordinary address translation is not
  disturbed.

The `.nop` suffix marks a store as off the critical path, for example the
per-row source information that the combine phase needs later. It lowers the
store's priority in the scheduler.

`rowsp_decode` drops and reports a store with a misaligned offset or a GPU id
at or above `N_GPUS`. Stores enter as 32-byte sectors. A 128-byte line is four
sectors.

## Producer side: the Runtime Packet Manager

`rpm` is a write-buffer pool with one fully associative partition of
`ENTRIES` lines per destination GPU.

**Merging.** A sector merges into a buffered line of the same kind (`st.` or
`st.rowsp`) and the same priority. The sector data is written and its bit in
the 4-bit validity mask is set.

* A `st.` line is identified by its line address.
* A `st.rowsp` line is identified by `{MallocID, RowID, RowOffset[15:7]}`.
  Each logical row therefore merges as if it were its own small address space.

Without a match, a free entry is taken. Without a free entry, the request waits
(a stall).

**Eligibility.** A line may leave when its mask is full. It may also leave
`TIMEOUT` cycles after it was allocated. This timer bypass keeps sparse
writes, such as a single source-information sector, from waiting forever.

**Scheduling.** Inside a partition, the eligible line with the smallest key
`{nop, RowID}` goes first. Normal traffic therefore leaves before `.nop`
traffic, and whole token rows complete in RowID order. Across partitions, a
round-robin pointer visits only destinations whose `dst_ready` is high, so a
congested link holds back its own traffic and nothing else.

**Timing.**

* One request in and one line out per cycle.
* A full line leaves on the edge after its last sector.
* A lone partial line leaves on the `TIMEOUT+1`th edge.

`packetizer` sends a line as one header flit plus two 16-byte flits per valid
sector, which is `1 + 2k` cycles for `k` sectors, back to back. `depacketizer`
rebuilds the line on the receiving side. The header carries every field except
the data, so the consumer sees exactly what the producer's RPM held.

## Consumer side: the Address Allocation Unit

The AAU (`aau`, with `apt` and `rat`) is the part that replaces the software
address exchange. It is also the part with the most state.

**Allocation Pointer Table (`apt`).** This is a 16-entry CAM keyed by MallocID.
`rowspMalloc` registers a region through MMIO. Each entry holds:

* BaseAddr
* AddrRange in bytes
* RowSize in bytes, a multiple of 128
* RowPointer, the next LocalRowID to hand out

Registering an existing MallocID again reinitialises it, with RowPointer back
to 0.

**Row Allocation Table (`rat`).** This caches `(MallocID, RowID) →
LocalRowID`. It has 16 banks of `WAYS` ways, and the bank is
`RowID[3:0] ^ MallocID[3:0]`. Each bank has a lookup port and a separate write
port. A full bank replaces its oldest mapping (FIFO).

**Packet flow.** Packets wait in a 4-deep In FIFO. For the head packet:

1. **RAT hit.** The address is formed and the write goes to the Out FIFO, one
   packet per cycle.
2. **RAT miss.** The AAU reads the row's spill record from device memory.
   * If there is a valid record from the region's current life, the row was
     seen before and its mapping was evicted. The mapping is restored.
   * Otherwise the row is new. It receives RowPointer, and RowPointer
     advances.
3. **Insert.** The mapping is written into the RAT. If this displaces an older
   mapping, that mapping is first written to its spill record. The packet is
   then looked up again and hits.

Because a row keeps its LocalRowID across eviction and restore, a late packet
of a row (for example its low-priority source information) still lands in the
same slot as the rest of the row.

**Epochs.** Every (re)registration of a MallocID advances a 4-bit epoch.
Mappings carry the epoch they were made in, so a reinitialised region never
resurrects a mapping from its previous use. Registering a region also flushes
that region's RAT entries.

**Drops.** The AAU drops and reports two kinds of packet:

* a packet for an unregistered MallocID;
* a packet whose line would end beyond AddrRange.

The LocalRowID is allocated before the range check. An overflowing row
therefore still consumes a RowPointer value.

**AAU timing.**

* A hit takes 1 cycle per packet.
* A miss takes the spill-read latency plus 2 cycles.
* A displacement adds the spill-write handshake.

Conventional `st.` packets skip the AAU through a 2-entry bypass FIFO. A
round-robin arbiter shares the single crossbar write port between the AAU and
the bypass.

## Data Availability Manager

`dam` lets the next kernel start tile by tile. It has three parts:

* **Dependency Table.** This is a 64-entry range CAM. Each entry is
  `AddrStart`, `AddrEnd` (inclusive) and a TB group, and it describes which
  input addresses each group of thread blocks reads.
* **TB status counters.** On every write acknowledgment, each entry whose range
  holds the address adds the acknowledged sector count to its group's counter.
  A group whose counter reaches the shared TB threshold raises its `tb_ready`
  bit one cycle after the acknowledgment. The bit stays set.
* **Global counter.** This counter adds every acknowledgment. When it reaches
  the total threshold, `all_ready` rises. Groups whose counters are still zero
  at that point are flagged in `tb_dealloc`, because their experts received no
  tokens.

Acknowledgments count 32-byte sectors, not packets. Thresholds are therefore
amounts of data, for example `rows * sectors per row`. They do not depend on
how well the producer managed to merge lines.

A write to `DAM_CTRL` clears all counters and flags at the start of a consumer
kernel.

## Driver registers

`hub_mmio` decodes 64-bit writes:

| offset | register    | offset | register |
|--------|-------------|--------|----------|
| 0x000  | APT_MID     | 0x100  | DT_START |
| 0x008  | APT_BASE    | 0x108  | DT_END   |
| 0x010  | APT_RANGE   | 0x110  | DT_GROUP |
| 0x018  | APT_ROWSIZE | 0x118  | DT_CMD: `[7:0]` index, `[8]` valid |
| 0x020  | APT_CMD: bit 0 = free (0 = register) | 0x200 | THR_TB |
|        |             | 0x208  | THR_TOTAL |
|        |             | 0x210  | DAM_CTRL: any write clears |

Fields are staged first, then committed by the `*_CMD` write. The resulting
command pulse reaches the AAU or DAM one cycle after the commit.

## The hub top (`moehub_top`)

`moehub_top` is the hub of one GPU. Its parameters and defaults:

| parameter | default |
|-----------|---------|
| `N_GPUS` | 8 |
| `RPM_ENTRIES` | 16 |
| `RPM_TIMEOUT` | 64 |
| `N_REGIONS` | 16 |
| `RAT_BANKS` | 16 |
| `RAT_WAYS` | 16 |
| `DT_ENTRIES` | 64 |
| `TB_GROUPS` | 64 |

Everything outside the hub is a port:

| port group | connects to | notes |
|------------|-------------|-------|
| `sm_*` | SM store interface | |
| `tx_*`, `rx_*` | link | 128-bit flits, `*_last` |
| `dst_ready` | per-destination link back-pressure | |
| `mem_wr_*` | crossbar write | |
| `ack_*` | memory acknowledgments | address and sector count |
| `sp_*` | RAT spill area | one outstanding read; reads must see earlier writes |
| `mmio_*` | driver | |
| `tb_ready`, `tb_dealloc`, `all_ready` | TB dispatcher | |
| `ev` | event pulses | merge, timeout, stall, RAT hit / alloc / evict / restore, overflow, unregistered, decode drop, APT full, bypass |

All state is reset asynchronously by `rst_n`.

## What follows the paper and what is this design's own

These follow the published MoE-Hub design:

* the three units (AAU, RPM, DAM) and their place in the hub;
* the `st.rowsp` store with MallocID / RowID / RowOffset and `.nop`;
* the address formula and RowPointer increment;
* the 16-bank dual-port RAT with FIFO eviction and spill and restore;
* the per-destination write-buffer partitions with validity masks, the timer
  bypass and round-robin scheduling with normal-before-`.nop`;
* 128-byte packets of 16-byte flits with one header flit;
* the range-CAM Dependency Table with per-group counters, one TB threshold, and
  the global counter raising AllReady and deallocating empty groups;
* 8 GPUs.

These are this design's own choices, because the paper does not give them:

* every bit width, the destination register layout and the header layout;
* 32-byte sectors;
* the entry counts: RPM 16 per destination, APT 16, RAT 16 ways per bank,
  DT 64, TB groups 64;
* the 64-cycle timeout;
* the RAT bank hash;
* reading the spill record to tell new rows from evicted ones, and the region
  epoch;
* the drop rules;
* how full lines are preferred: the paper prioritises entries with a full
  validity mask. Here a partial line is not eligible at all until its timer
  expires, and among eligible lines only `{nop, RowID}` decides. A timed-out
  partial line with a small RowID can therefore leave before a full line with
  a larger RowID;
* counting sectors in the DAM, and `>=` threshold compares (two table entries of
  one group may match one acknowledgment);
* the MMIO map;
* the bypass FIFO and the crossbar arbiter.

These are not built:

* the SM load/store unit and TLB changes;
* the TB dispatcher;
* the crossbar, IOMMU and memory;
* the NVLink ports and switch;
* the global synchronizer that one figure of the paper draws but never
  explains.

Their signals are the top's ports. IOMMU translation of the AAU's device
address is assumed to happen after the hub.

## Sizes against real models

The defaults hold the three models the paper evaluates (Mixtral 8x7B, Qwen2-MoE-2.7B and Phi-3.5-MoE) for batches of 128 to 32768 tokens on 2 to 16 GPUs. The sizing assumes bf16 activations, one extra 128-byte line per row for source information, and a whole-batch token count.

| limit | built | largest need |
|-------|-------|--------------|
| RowID | 20 bits | 32768 tokens × top-4 = 131072 rows |
| LocalRowID | 16 bits | 65536 rows, for Qwen2 on 2 GPUs with two experts per region (32 experts per GPU, 16 regions) |
| RowOffset | 16 bits | rows of 4096 × 2 B + 128 = 8320 B |
| GPU id | 4 bits | 16 GPUs; set `N_GPUS` to the system size |

The RAT is only a cache. More live rows than its 256 entries costs spill traffic, not correctness.

The 64 TB groups cover one 128-row GEMM tile per group up to about 8192 rows per GPU. Beyond that, several tiles share a group and readiness becomes coarser.

## Verification

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`.

| testbench | block | what it checks |
|-----------|-------|----------------|
| `tb_rowsp_decode` | `rowsp_decode` | field extraction, GPU selection, drops and handshake for random stores |
| `tb_rpm` | `rpm` | merge; send latency of a full line (next edge) and a timed-out line (`TIMEOUT+1`); normal-before-`.nop` and RowID order; round-robin order over destinations; congestion skip; no merge across kinds; stall on a full partition |
| `tb_packetizer` | `packetizer`, `depacketizer` | flit contents and the `1 + 2k` flit rate; exact rebuild under random back-pressure |
| `tb_rat` | `rat` | FIFO victims, hits and flush against a reference model |
| `tb_aau` | `aau`, `apt` | a shrunken RAT and a behavioural spill memory; dense allocation, restore after eviction, overflow and unregistered drops, reinitialisation with epochs, one write per cycle on hits |
| `tb_dam` | `dam` | overlapping ranges, thresholds, AllReady, dealloc and clear against a reference |
| `tb_hub_mmio` | `hub_mmio` | register map and command pulses |
| `tb_moehub_top` | `moehub_top` | end to end at full size (below) |

`tb_moehub_top` runs two full-size hubs with every parameter at its default,
about 63,000 cycles. GPU 0 dispatches 1024 tokens, each to two experts, to
itself, to GPU 1 and to sink GPUs. The traffic also includes:

* late source-information stores;
* an overflowing region;
* an unregistered region;
* malformed stores;
* conventional stores.

It checks:

* that every region holds each expected row exactly once, densely and
  intact;
* that `tb_ready` follows its reference every cycle;
* that `all_ready` rises exactly at the last expected sector;
* that `tb_dealloc` marks the empty groups;
* that each mechanism fired at least once: merge, timeout, stall, congestion
  skip, `.nop` packets, RAT hit / alloc / evict / restore, overflow,
  unregistered drop, bypass, decode drop, TB Ready, AllReady, dealloc.

`tb_moehub_workload` runs one MoE layer's dispatch for each evaluated model
at its real row size and expert placement, eight GPUs and eight tokens:

| model | hidden | top-k of experts | data per row |
|-------|--------|------------------|--------------|
| Mixtral 8x7B | 4096 | top-2 of 8 | 8 KiB |
| Qwen2-MoE-2.7B | 2048 | top-4 of 64 | 4 KiB |
| Phi-3.5-MoE | 4096 | top-2 of 16 | 8 KiB |

Each region holds one expert.

The testbench checks three things:

* every expert region on the two modelled GPUs holds exactly its rows;
* the sinks receive every sector;
* the DAM raises a row's Ready before the whole dispatch has arrived.

That last point is the early start that the hub exists for.

The source-information sector of a row is a `.nop` store. A row therefore
becomes Ready only once normal traffic to that GPU pauses or that sector's turn
comes.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert rtl/moehub_pkg.sv rtl/*.sv tb/tb_moehub_top.sv \
          --top-module tb_moehub_top -o sim
./obj_dir/sim
```

The testbenches reset or initialise everything they read, so the random
initial values of a two-state simulator do not matter. The end-to-end run takes
a few minutes, mostly spent building the 1024-bit wide RPM.

Lint leaves only these warnings:

* unused bits of shared structs;
* an asynchronous reset that is also used in the `disable iff` of assertions.
