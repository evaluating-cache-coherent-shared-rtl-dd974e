# Cache-coherent shared virtual memory for a CPU + throughput-core chip

This design puts general-purpose CPU cores and many-thread SIMT cores (called
MTTOP cores here, "massively threaded throughput-oriented processors") on one
chip. They share one virtual address space and one coherent cache hierarchy. A
CPU thread can pass a pointer to an MTTOP thread and it just works:

- both cores translate through the same x86-64 page tables;
- both keep their caches coherent with the same MOESI directory protocol;
- neither copies data to a separate device memory;
- neither flushes caches before handing over work.

A small memory-mapped device, the MIFD (MTTOP interface device), does the rest:

- it starts MTTOP threads;
- it reports MTTOP page faults to a CPU;
- it performs TLB shootdowns on the MTTOP cores.

The RTL covers the whole memory system of the chip. The core pipelines are not
built. In their place, each core's node has a load / store / atomic / fetch port.

## Chip organisation

The chip is a 5 x 4 two-dimensional torus. Node id = y*5 + x.

| row | nodes | contents |
|---|---|---|
| 0 | 0-4 | MTTOP cores 0-4 |
| 1 | 5-8 | L2 banks 0-3 (1 MB each, directory in the tags) |
| 1 | 9 | memory controller 0 |
| 2 | 10-13 | CPU cores 0-3 |
| 2 | 14 | memory controller 1 |
| 3 | 15-19 | MTTOP cores 5-9 |

Core numbering puts the CPUs first: cores 0-3 are CPUs and cores 4-13 are the
MTTOP cores. Each core node holds:

- a CR3 register;
- a 64-entry TLB;
- a hardware page-table walker;
- an L1 instruction cache and an L1 data cache.

The L1s are 64 KB with a 2-cycle hit on a CPU, and 16 KB with a 1-cycle hit on
an MTTOP core.

Physical block addresses are interleaved:

- bits [1:0] of the block address choose the L2 bank;
- bit [2] chooses the memory controller.

The whole chip runs on one clock, and every latency is counted in its cycles:

| latency | cycles |
|---|---|
| CPU L1 hit | 2 |
| MTTOP L1 hit | 1 |
| L2 | 10 |
| DRAM model (about 100 ns) | 290 |

| file | what it is |
|---|---|
| `rtl/ccsvm_pkg.sv` | sizes, node map, message and request types |
| `rtl/sync_fifo.sv` | small FIFO helper |
| `rtl/torus_router.sv`, `rtl/torus_network.sv` | the on-chip network |
| `rtl/tlb.sv`, `rtl/ptw.sv` | translation |
| `rtl/l1_cache.sv` | L1 with its coherence controller |
| `rtl/l2_dir_bank.sv` | L2 bank with the directory |
| `rtl/mem_ctrl.sv` | memory controller |
| `rtl/mifd.sv` | MTTOP interface device |
| `rtl/core_node.sv` | one core's node: TLB, walker, two L1s, network port |
| `rtl/ccsvm_chip.sv` | the top |
| `tb/dram_model.sv` | behavioural DRAM |
| `tb/tb_ccsvm_chip.sv` | end-to-end test |
| `tb/tb_tlb.sv`, `tb/tb_ptw.sv`, `tb/tb_mifd.sv` | unit tests |

## The coherence protocol

The protocol is a plain, blocking MOESI directory protocol. The directory state
(sharer vector, owner) lives in the L2 tags, and the L2 is inclusive of all L1s.
The protocol aims to be simple and obviously deadlock-free, not fast:

- **One transaction per L2 bank at a time.** A bank takes a request (GETS,
  GETX, PUTX) and stays busy until the requester sends UNBLOCK. While the bank
  is busy, new requests wait in the network. Transient states are therefore few.
- **Owner data goes through the directory.** For a GETS to a block that another
  L1 owns:
  1. the bank sends FWD_GETS to the owner;
  2. the owner returns OWN_DATA to the bank and keeps the block in O or S;
  3. the bank sends GRANT with the data to the requester.

  GETX works the same way with FWD_GETX, and INV goes to each sharer, which
  answers INV_ACK. A GRANT carries the state granted (S, E or M). It carries
  the data only when the requester needs it. An upgrade from S or O to M is
  granted without data.
- **Evictions.** An L1 drops an S block silently. For E, O and M it sends PUTX,
  with the data when the block is dirty, and waits for WB_ACK. When the L2
  evicts a block that L1s still hold, it first recalls the block from them
  (invalidations, or a forward to the owner). Then it writes the block to DRAM
  if it is dirty.
- **Atomics.** CAS, add, increment and decrement execute inside the L1 once the
  L1 holds the block in E or M. The old value is returned. The MTTOP cores
  depend on this for synchronisation.
- **Three virtual networks** keep requests, forwards and responses apart:
  - requests (L1 to directory);
  - forwards and invalidations (directory to L1 and memory controller). An L1
    always sinks these;
  - responses.

  Because forwards and responses are always consumed, no request can block
  them.

Each L1 has at most one outstanding miss or writeback. Priority inside the L1
is: incoming response, then incoming forward, then the core's request.

## Network

Each router has 5 ports: the four torus directions and local.

- **Routing.** Dimension order: first X, then Y, each time the shorter way
  round the ring. A tie goes in the + direction.
- **Deadlock freedom on the rings.** Each virtual network has two virtual
  channels. A message moves to channel 1 when it crosses a ring's wrap-around
  link, and returns to channel 0 when it turns into Y.
- **Buffering.** Every (input port, virtual network, channel) has a 2-entry
  FIFO. Upstream sees a registered "not full" signal.
- **Arbitration.** Round-robin per output port.

One whole coherence message (header plus a 64-byte block) moves as one flit,
one hop per cycle.

## Translation and page faults

Both kinds of core use the same x86-64 four-level page tables: 9-bit indices,
present bit 0, writable bit 1, and bit 7 for 1 GB / 2 MB pages.

On a TLB miss, the walker reads the page table through the node's own L1D. So
page-table reads are coherent, and a CPU that edits a PTE is seen at once by
any walker that later reads it.

A walk that finds a missing page or a write to a read-only page is a page fault:

1. On an MTTOP core, the fault goes to the MIFD with the virtual address, the
   cause and CR3.
2. The MIFD interrupts a CPU, which fixes the table.
3. The CPU writes FAULT_DONE to the MIFD.
4. The faulting core retries the walk.

On a CPU the same fault signals are brought out to the top for the operating
system.

## The MIFD

The MIFD takes four commands:

| code | command | effect |
|---|---|---|
| 0 | LAUNCH (PC, argument pointer, thread-id range, CR3) | hands out threads in warps of 8, round-robin over the 10 MTTOP cores |
| 1 | SHOOTDOWN | flushes every MTTOP TLB |
| 2 | FAULT_DONE | resumes the faulting core |
| 3 | CLEAR_ERROR | clears the error register |

More details on LAUNCH:

- Each core has 16 warp contexts (128 threads).
- The core loads CR3 when a warp is launched on it.
- If a launch asks for more threads than there are free contexts, the MIFD
  places the warps that fit, drops the rest and sets its error register.
  Software must not rely on every thread of such a launch running.

## Where this departs from the source design

- A single clock replaces the separate CPU (2.9 GHz) and MTTOP (1.45 GHz)
  clocks.
- Link bandwidth (12 GB/s) is not modelled as a link width. A whole message is
  one flit.
- The message set, the blocking directory, the path of owner data through the
  directory, and the L2 recall on eviction are this design's own choices.
- Cache associativity (4-way L1, 8-way L2) and the replacement policies
  (round-robin) are this design's own choices.
- TLB shootdown flushes whole TLBs rather than single entries.
- Accessed and dirty bits in PTEs are not updated.
- The instruction and data L1 of a node share one network injection port.

## Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/ccsvm_pkg.sv rtl/sync_fifo.sv rtl/torus_router.sv rtl/torus_network.sv \
  rtl/tlb.sv rtl/ptw.sv rtl/l1_cache.sv rtl/l2_dir_bank.sv rtl/mem_ctrl.sv \
  rtl/mifd.sv rtl/core_node.sv rtl/ccsvm_chip.sv tb/dram_model.sv \
  tb/tb_ccsvm_chip.sv --top-module tb_ccsvm_chip -Mdir obj
./obj/Vtb_ccsvm_chip
```

The end-to-end test runs the chip at its full default size. It:

1. builds page tables in the DRAM model;
2. has the CPUs write two vectors;
3. launches 32 MTTOP threads to add them, with an atomic counter;
4. takes an MTTOP page fault and lets a CPU service it;
5. remaps a page and shoots down the MTTOP TLBs;
6. forces L2 evictions with recall and dirty writeback;
7. overflows the MIFD;
8. runs a CPU compare-and-swap.

It counts every protocol mechanism it sees and fails if any count stays at
zero. It ends with a `TB_RESULT checks=N failures=M` line.

Known state:

- The end-to-end test does not pass yet. In some builds, the first
  page-table read of a CPU comes back as zero even though the L2 sends the
  right data. This makes the read look like a not-present page fault, and the
  test stops at its watchdog. Whether it happens depends on the simulator's
  event order, so look for an ordering race between the L1 response path and
  its fill.
- In builds where that read is correct, the following all check out:
  - the vector add;
  - the MTTOP page-fault path;
  - the atomics;
  - the MIFD error.

  The data checks after the TLB shootdown and after the forced L2 recalls
  still fail.
- Treat the L1 fill path and the L2 eviction and recall paths as not yet
  trustworthy.
- Self-checking unit tests exist for the TLB, the page-table walker and the
  MIFD (`tb/tb_tlb.sv`, `tb/tb_ptw.sv`, `tb/tb_mifd.sv`). They pass. The caches,
  the directory, the memory controller, the routers and the core node are
  tested only through the chip.
