# HERO PMCA: a manycore accelerator that shares virtual memory with its host

This RTL models the programmable manycore accelerator (PMCA) of a heterogeneous embedded
system. In that system an ARM host CPU and a cluster-based RISC-V accelerator work on the same
data in the host's main memory. Because the host and the PMCA share virtual address pointers, the
host can offload work by passing a pointer instead of copying data into a special buffer. This
works because every PMCA access to host memory passes through a software-managed address
translation unit, the remapping address block (RAB).

The second idea built here is non-intrusive, cycle-accurate tracing. Small tracer blocks record
timestamped events on chosen signals. When a tracer's buffer fills, the accelerator's clock is
stopped until the host has drained the buffer, so the traced program never notices.

The RTL covers the accelerator side of the platform:
- clusters of processing-element (PE) ports with their L1 scratchpads, interconnect, DMA, event
  unit and timer;
- the SoC bus with the L2 scratchpad, a mailbox and the RAB;
- the event tracers and the clock gate.

It does not cover the RISC-V cores themselves, the host CPU, its DRAM or the chip-to-chip link.
They appear as ports of the top level, `hero_pmca`.

## Block structure

```
           host_in_*  (host accesses into the PMCA)
               |
  +------------v-------------------- SoC bus (req_bus) -------------------------+
  |  cluster 0 .. NC-1       L2 scratchpad     mailbox     RAB cfg     RAB       |
  +--------^---------------------------------------------------------------|-----+
           |                                                               v
   pmca_cluster                                          host_mem_* (40-bit physical)
   +------------------------------------------------+
   | cluster bus (req_bus): PEs' outgoing, DMA,     |
   |   incoming from SoC -> L1 (bus2tcdm) or periph |
   | PE p -> core_demux -+-> tcdm_xbar -> NB x spm_bank
   |                     +-> peripheral bus (req_bus)
   |                           event_unit, cluster_timer, cluster_dma cfg
   | cluster_dma: L1 port on the X-Bar, outer port on the cluster bus
   +------------------------------------------------+

   event_tracer x3 on the RAB request, response and config channels
   clk_gate: PMCA clock = clk_i while no trace buffer is full
```

The default parameters are the platform's main (8-cluster) configuration:

| Parameter | Meaning | Default |
|---|---|---|
| `NC` | clusters | 8 |
| `NPE` | PEs per cluster | 8 |
| `NB` | L1 banks per cluster | 16 |
| `L1_BYTES` | L1 per cluster | 256 KiB |
| `L2_BYTES` | L2 scratchpad | 256 KiB |
| `RAB_L1` | L1 TLB entries | 32 |
| `RAB_L2` | L2 TLB entries | 1024 |
| `RAB_L2_WAYS` | L2 TLB associativity | 32 |
| `RAB_L2_BANKS` | L2 TLB banks | 4 |

This design chose its own sizes for the DMA channels (4), the mailbox depth (16) and the trace
buffer depth (512 entries).

## One protocol everywhere

Every path uses the same split-transaction protocol, declared in `hero_pkg`:
- A request channel `bus_req_t {addr, we, be, wdata, id}` with valid/ready.
- A response channel `bus_rsp_t {rdata, err, id}` with valid/ready.

A master has at most one transaction outstanding per ID. Each `req_bus` level shifts the ID
left and appends the master's index. On the way back it routes the response by those low bits
and shifts them away. Responses can therefore return in any order, and a bus needs no
reorder buffer.

`req_bus` is a real shared bus. Each cycle it passes one request, chosen by round robin among
the masters, and one response, chosen by round robin among the slaves. Addresses are decoded
against `[SLV_BASE, SLV_END)` windows, with a default slave for everything else. It is used as
the SoC bus, the cluster bus and the peripheral bus. Because its bandwidth does not grow with
the number of masters, eight clusters that all stream through it compete for it. This is the
effect the original platform shows when its matrix multiplication scales to eight clusters.

`stream_fifo` (two entries) decouples the buses where they meet. It stands in for the protocol
bridges of the original cluster (peripheral-to-AXI and back).

## Address map

| Address | Target |
|---|---|
| `0x1000_0000 + c*0x40_0000` | cluster `c` |
| within a cluster: `+0x0` | L1 scratchpad window (`L1_BYTES`) |
| within a cluster: `+0x20_0000` | event unit |
| within a cluster: `+0x20_0400` | timer |
| within a cluster: `+0x20_0800` | DMA registers |
| `0x1A10_0000` | RAB configuration |
| `0x1A12_0000` | mailbox (PMCA side `+0x000`, host side `+0x100`) |
| `0x1C00_0000` | L2 scratchpad |
| anything else | shared virtual memory, through the RAB |

A PE's `core_demux` sends its own cluster's L1 window to the X-Bar and everything else to the
peripheral bus. From there the cluster bus decides between the local peripherals and the SoC bus.
Remote L1s, L2, the mailbox and SVM are all reached the same way.

## Shared virtual memory: the RAB

The RAB (`rab`) takes a 32-bit virtual address from the SoC bus. It produces a 40-bit host
physical address on `host_mem_*`. Pages are 4 KiB. The RAB has two translation levels, and their
timing is part of what the platform exposes to software and to the tracers.

**L1 TLB** (`rab_l1_tlb`, 32 entries, fully associative, in registers).
- It is searched combinationally.
- On a hit with the right permission (read or write), the translated request leaves on the host
  port in the same cycle the RAB accepts it. This is single-cycle translation.

**L2 TLB** (`rab_l2_tlb`, 1024 entries, 32 ways, 4 banks).
- Sets are indexed by the low VPN bits. Each set's 32 ways are spread over 4 memories, so one
  way per bank is read per cycle.
- A search ends with a hit on way `w` after `w/4 + 2` cycles. The translated request leaves one
  cycle later. A miss ends after `32/4 + 1 = 9` cycles.
- The number of cycles therefore reveals where an entry was placed. The tracers can measure this
  to compare placement strategies.
- After reset the L2 TLB clears itself. This takes `SETS*WAYS/BANKS` = 256 cycles, with `busy_o`
  high throughout.

**Hit under miss.** While the L2 TLB searches for one request, the RAB keeps accepting requests
that hit in the L1 TLB and translates them at once. So a second core's L1 hit overtakes the first
core's L2 search. A second L1 miss waits until the L2 TLB is free. When the L2 result arrives it
has priority on the host port for that cycle.

**Misses are handled by software on the PMCA.** If an access misses in both TLBs, or lacks the
needed permission:
1. The RAB answers it with `err = 1`.
2. It records `{address, write flag, ID}` in the miss FIFO and raises `rab_miss_o`.
3. In the intended flow, the PE that missed goes to sleep through its event unit.
4. Another PE runs the miss handler. It reads `MISS_ADDR` and `MISS_META`, walks the host page
   table in shared memory, and writes a new entry: `ENTRY_VPN`, `ENTRY_PPN` and `ENTRY_FLAGS`,
   then `L1_COMMIT` (index) or `L2_COMMIT` (way).
5. The handler pops the FIFO (`MISS_POP`) and wakes the sleeping PE, which retries.

The host can write entries through the same configuration port.

Configuration registers (offsets from `0x1A10_0000`):

| Offset | Register | Access |
|---|---|---|
| `0x00` | `ENTRY_VPN` | write |
| `0x04` | `ENTRY_PPN` (physical address >> 12) | write |
| `0x08` | `ENTRY_FLAGS` `{wr_en, rd_en, valid}` | write |
| `0x0C` | `L1_COMMIT` | write: L1 index |
| `0x10` | `L2_COMMIT` | write: way |
| `0x20` | `MISS_ADDR` | read |
| `0x24` | `MISS_META` `{we[16], id[15:0]}` | read |
| `0x28` | `MISS_POP` | write |
| `0x2C` | `MISS_COUNT` | read |

## Event tracing and the PMCA clock stop

Three `event_tracer`s watch the RAB:

| Tracer | Channel | Recorded data |
|---|---|---|
| 0 | request handshake | `{id, we, addr}` |
| 1 | response handshake | `{id, err, rdata}` |
| 2 | configuration port | `{id, we, offset, wdata}` |

A tracer stores `{timestamp, data}` when all of these hold:
- it is enabled;
- its channel fires;
- `(data & MASK) == MATCH`.

The recorded transaction ID tells which core made an access. Each bus level appends its master
index, so for a PE's SVM access:
- bits 3:0 hold the cluster;
- bits 5:4 hold the cluster-bus master (0 for PE traffic, 1 for the DMA);
- bits 9:6 hold the PE.

The timestamp counter is shared by all tracers. It runs on the free clock but advances only
while the PMCA is clocked, so timestamps count the PMCA's own cycles.

When any buffer becomes full:
1. `run` drops and `clk_gate` stops the PMCA clock. `clk_gate` is a latch that is transparent
   while the clock is low, followed by an AND gate, so it creates no glitches.
2. `trace_irq_o` is raised.
3. All handshakes with the outside are masked while the clock is stopped. This covers the PE
   ports, `host_in_*` and `host_mem_*`. The PMCA's state is frozen and no transfer is half done.
4. The host drains the buffers over `host_trc_*`, which runs on the free clock. Tracer `t` is at
   `t*0x1_0000`.
5. The host writes `CLEAR`, and the PMCA clock starts again.

Tracer registers:

| Offset | Register |
|---|---|
| `0x000` | `CTRL` (enable) |
| `0x004` | `MASK` |
| `0x008` | `MATCH` |
| `0x00C` | `COUNT` |
| `0x010` | `CLEAR` |
| `0x014` | `ID` |
| `0x8000 + 16*i` | entry `i`: timestamp, data low word, data high word |

## Inside a cluster

- **L1 scratchpad.** `NB` single-port banks (`spm_bank`), word-interleaved: bank = address
  bits `[2 +: log2 NB]`.
- **X-Bar** (`tcdm_xbar`). It connects the PEs, the DMA and the incoming SoC port (`bus2tcdm`) to
  the banks. Each bank has its own round-robin arbiter. Masters that target different banks are
  all served in the same cycle. A read returns one cycle after its grant. A master that loses
  the arbitration simply stays valid: this is the bank-conflict stall.
- **DMA** (`cluster_dma`). Each channel has `SRC`, `DST`, `LEN` and `CMD` registers at
  `ch*0x20`, plus `STATUS` at `0x100` and `ERR` at `0x104`. One engine serves the channels in
  round robin. It copies one word at a time, reading then writing. Each access uses the X-Bar
  when its address is in the local L1 and the cluster bus otherwise, so any pair of L1, remote L1,
  L2 and SVM works.
- **Event unit** (`event_unit`).
  - A write to `SLEEP` puts the writing PE to sleep. The PE is identified from the transaction
    ID.
  - Writes to `WAKE` or `EVENT` clear the sleep bits given in the mask.
  - `STATUS` returns the sleep bits, which also appear on `pe_sleep_o`. A PE model must stall
    while its bit is set.
- **Timer** (`cluster_timer`). Registers: `CTRL`, `COUNT`, `CMP`. On a match the counter
  restarts and `timer_irq_o` pulses.
- **Mailbox** (`mailbox`). Two FIFOs: PMCA→host and host→PMCA. Each side has `DATA` and
  `STATUS` registers. Each receiver gets a level interrupt while its queue is non-empty.

## Where this RTL departs from the published platform

- The RISC-V PEs, the shared instruction cache and the shared APU are not included. The main
  configuration has the FPU disabled and the DSP unit, divider and multiplier private, so no APU
  is needed. The PE data ports are top-level ports, and a testbench plays the cores.
- The per-PE "TRYX" blocks of the cluster diagram are not built. Their function is not described.
  Retry after a RAB miss is left to PE software, which sees `err = 1`.
- AXI is replaced by the single protocol above. Bridges become FIFOs.
- The host/PMCA multiplexer next to the RAB becomes SoC bus arbitration: the host is one more bus
  master.
- The following are this design's own choices, where the platform description gives none:
  - register maps, the address map and the page size;
  - TLB entry format, L2 set indexing and search order;
  - DMA channel count and copy scheme;
  - tracer activation form, buffer depth and data packing.
- The system interconnect is the bus option. The network-on-chip alternative is not built.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. The unit tests cover:
- timing: the one-cycle bank and X-Bar latency, single-cycle L1 TLB translation, and the L2 TLB
  search times per way and for a miss;
- arbitration fairness and ordering;
- hit under miss;
- DMA copies in all directions;
- the tracer's stop, drain and clear sequence.

`tb_hero_pmca` runs the full default configuration (8x8 PEs) end to end. It counts each mechanism
and fails if any never happens. The mechanisms are:
- L2 access, remote-L1 access and bank conflicts;
- timer, sleep/wake and DMA;
- mailbox in both directions;
- L1 TLB hit (checked to be single-cycle) and L2 TLB hit (checked to take `w/4 + 3` cycles to
  the host port);
- hit under miss;
- miss with software handling and retry;
- trace-buffer-full clock stop with host drain and resume.

During the clock stop the test checks three things: the clock stays off, the timestamp freezes,
and none of the 640 SVM accesses in flight is lost.

`tb_hero_matmul` runs a 16x16 integer matrix multiplication on the full PMCA on 1, 2, 4 and 8
clusters. The matrices live in host memory behind the RAB.
1. Each cluster DMAs B into its L1.
2. For each of its rows, it DMAs in the row of A.
3. Its eight PEs compute the row of C with real L1 loads and stores.
4. The row is DMA'd back to host memory.

Results are checked against a reference, and run times must fall as clusters are added. They
measure 9004, 5532, 3798 and 2934 cycles. At this small size each cluster's private copy of B
crosses the shared SoC bus, and this limits the speedup. The platform's own study moves a column
of B per row instead; the DMA here has no strided mode.

## Simulating

All files use SystemVerilog-2017 and need no preprocessor defines. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal rtl/hero_pkg.sv \
    $(ls rtl/*.sv | grep -v hero_pkg) tb/tb_hero_pmca.sv --top-module tb_hero_pmca
./obj_dir/Vtb_hero_pmca
```

Replace `tb_hero_pmca` by any other testbench name to run a unit test. The full-size top test
builds in about half a minute and runs in a few seconds. The simulator is two-state. The designs
reset or initialise everything they read, except memory contents, which the testbenches write
before reading.
