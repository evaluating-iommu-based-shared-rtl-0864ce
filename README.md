# Shared virtual addressing for a RISC-V host and accelerator: memory-system RTL

An embedded SoC that pairs a Linux host core with a programmable accelerator
usually gives the accelerator its own, physically addressed, contiguous DRAM
region. To offload, the host copies its virtual-memory buffers into that
region and copies the results back. An IOMMU removes the copy: it translates
the accelerator's DMA addresses through the same kind of page tables the host
uses, so the accelerator works on the host's buffers in place ("zero-copy").

There is a cost. Each IOTLB miss takes a page-table walk. With Sv39 that is up
to three dependent memory reads, plus the device-context reads the first time
a device is seen. When DRAM latency is high, the walks cut the DMA bandwidth.

This memory system is built around two ideas:

1. **Walks go through a shared last-level cache.** The host writes the IO page
   tables through the LLC, and the IOMMU walker reads them through the same
   LLC. A walk then usually costs a few cache hits rather than three DRAM round
   trips.
2. **Accelerator DMA bypasses that cache.** The same DRAM is visible at a
   second bus address, a fixed offset higher. The second address goes around
   the LLC. The accelerator adds the offset to its IO virtual addresses and the
   IOMMU keeps it through translation. So the DMA's long bursts stream
   straight from DRAM, without evicting host lines or page-table entries.

A configurable DRAM latency stage lets the effect be measured at the DRAM
latencies of a real chip, even when the system is clocked slowly, as on an
FPGA prototype.

The RTL covers the memory system between the cores and the DRAM controller:

- the IOMMU, with its IOTLB, device-directory cache and page-table walker;
- the system crossbar;
- the L2 scratchpad;
- the LLC, with the bypass demux and mux around it;
- the DRAM delayer.

The host core, the accelerator cluster, the peripherals and the DDR controller
are outside the top level. They attach through AXI ports.

## Block structure

```
 host master -------------------------\
 accelerator DMA --> IOMMU --(device)--> crossbar (3x3, 64-bit AXI4) --> L2 SPM, 1 MiB
                          \--(walks)---/     |          \--> external port (everything else)
                                             v
                                    LLC bypass demux
                                     |            |
                              LLC 128 KiB     bypass path
                                     \            /
                                     2:1 AXI mux
                                          |
                                     AXI delayer --> DRAM controller port
```

| module | role |
|---|---|
| `iommu_svm_soc` | top level, wiring as above |
| `iommu` | IOVA to PA translation of AW/AR; fault answering; statistics |
| `iommu_iotlb` | 4-entry fully associative IOTLB (4 KiB / 2 MiB / 1 GiB leaves) |
| `iommu_ptw` | device-context fetch and Sv39 walk over its own AXI read port |
| `axi_xbar` | full crossbar: one `axi_demux` per master, one `axi_mux` per slave |
| `axi_demux`, `axi_mux` | 1:M and N:1 AXI4 building blocks |
| `llc_bypass_demux` | sends alias and reserved DRAM around the LLC, removing the offset |
| `axi_llc` | blocking write-back, write-allocate cache with a flush operation |
| `axi_delayer` | delays B and R by `delay_i` cycles with time-stamped FIFOs |
| `axi_sram` | AXI4 memory slave used as the L2 scratchpad |
| `axi_pkg`, `iommu_pkg` | bus structs, PTE and device-context field positions, cause codes |

Every AXI link is one pair of packed structs, `axi_pkg::req_t` and
`axi_pkg::rsp_t`:

- 64-bit address and 64-bit data;
- 8-bit ID and 8-bit user field;
- AXI4 bursts of up to 256 beats, of type INCR or FIXED;
- no locks, caches or QoS signals.

The device ID rides in the AW/AR `user` field.

## Address map

These are the top's parameter defaults. All of them can be changed.

| region | bus address | goes to |
|---|---|---|
| L2 scratchpad | `0x7800_0000` .. +1 MiB | `axi_sram` |
| DRAM, cached | `0x8000_0000` .. `0xBFFF_FFFF` | LLC, then DRAM |
| DRAM, reserved half | `0xC000_0000` .. `0xFFFF_FFFF` | bypass, then DRAM (never cached) |
| DRAM alias | `0x100_8000_0000` .. +2 GiB | bypass, then DRAM at (address - `BYPASS_OFFSET`) |
| anything else | | external port `ext_req_o` (accelerator registers, peripherals) |

The reserved upper half of DRAM is for the copy-based style of offload, with
physically contiguous DMA buffers. It is never cached, so host and accelerator
see the same data there without any flush. The alias window is for zero-copy.
`BYPASS_OFFSET` is 2^40. It is one address bit, so it survives translation, as
described below.

## Translating an accelerator access

The IOMMU handles one AW or AR at a time. W, B and R beats pass through it
unchanged. W beats are held back until their AW has been translated.

1. **Select and strip.** The IOMMU takes the request and clears the bits in
   `PASS_MASK`, the bypass alias bit by default. What is left is the IOVA. The
   IOVA must be canonical Sv39: bits 63..39 equal to bit 38. Otherwise the
   access faults.
2. **Device context.** `ddtp_mode_i` selects the mode:
   - *Off* faults every access.
   - *Bare* passes every address through unchanged. This is the "IOMMU off"
     baseline.
   - *1LVL* looks up the device directory at `ddtp_ppn_i`.

   A single-entry device-directory cache (DDTC) holds the context of the last
   device. On a DDTC miss the walker reads two doublewords of the device's
   32-byte context: `tc` at offset 0 (valid bit) and `fsc` at offset 24 (MODE
   and root PPN). A context whose `fsc` mode is Bare gives untranslated
   access. That is how a second device ID, such as an instruction cache, can
   skip translation.
3. **IOTLB.** The IOTLB is fully associative and tagged with the device ID
   and the virtual page number. An entry stores its page level, so one entry
   covers a 4 KiB, 2 MiB or 1 GiB page. It also stores R/W permission. A hit
   gives the PPN at once.
4. **Walk.** On a miss the walker reads up to three PTEs. Each is one
   single-beat 64-bit read on `ptw_req_o`, which the crossbar sends to DRAM
   through the LLC. The walker checks:
   - V, and W-without-R;
   - superpage alignment;
   - the R or W permission for the access.

   A good leaf is written into the IOTLB in round-robin order, and the lookup
   is repeated. An error response on a walk read counts as an access fault.
5. **Forward.** The physical address is the PPN, plus the page offset, plus
   the bits that were stripped in step 1. The request goes out on `mem_req_o`
   with its ID, length and user field unchanged.

**Timing.** A hit forwards the request two cycles after it was accepted. A
miss adds one full memory round trip per doubleword read: 0–2 for the device
context, then 1–3 for the page table. The walk reads are dependent, so they
are not pipelined. Whether these reads hit in the LLC decides the cost of
translation.

**Faults.** For a faulting request the IOMMU does not forward anything. It
first waits until every earlier transaction in that direction has completed,
so that response order stays correct. Then it answers by itself:

- a read gets SLVERR on every beat;
- a write has its W beats drained and gets one SLVERR B response.

The outputs `iommu_fault_valid_o`, `iommu_fault_cause_o` and
`iommu_fault_iova_o` report the fault. The cause codes are those of the RISC-V
IOMMU specification:

| code | cause |
|---|---|
| 5 / 7 | access fault on read / write |
| 13 / 15 | read / write page fault |
| 256 | all inbound transactions disallowed (mode Off) |
| 257 | device-directory access fault |
| 258 | device context not valid |
| 259 | device context misconfigured |

`iommu_inval_i` clears the IOTLB and the DDTC. It replaces the invalidation
commands of the specification's command queue.

**Statistics.** Three counters support measuring the average walk time:

- `iommu_stat_hits_o`: requests served without a walk;
- `iommu_stat_walks_o`: walks;
- `iommu_stat_walk_cycles_o`: cycles spent walking.

## The bypass alias and what software must do

The accelerator puts `buffer_iova + BYPASS_OFFSET` on the bus. The IOMMU
translates the IOVA part and keeps the offset bit. The crossbar sends the
resulting physical alias to the DRAM window. The bypass demux recognises the
alias, removes the offset, and sends the access around the LLC. The host keeps
using the plain addresses, which are cached.

The hardware keeps no coherence between the two paths. Software has to do
this in order:

1. Write the input data through the cache.
2. Flush the LLC (`llc_flush_i`; `llc_flush_busy_o` is high until done), so
   that DRAM holds the host's data.
3. Write the IO page tables and device context through the cache. Written
   after the flush, they stay in the LLC, where the walker finds them.
4. Invalidate the IOMMU (`iommu_inval_i`) and start the accelerator.
5. When the accelerator is done, make sure the host has no stale cached copy
   of the output. Either flush again, or read output that was never cached.

The host core's own write-through data cache is outside this design.

## Last-level cache

- 256 sets × 8 ways × 64-byte lines, which is 128 KiB.
- Write-back and write-allocate. The victim is chosen round-robin per set.
- Blocking: one AXI transaction at a time. Reads and writes alternate when
  both are waiting.
- A beat is looked up in one cycle. Hits then stream at one beat per cycle
  while the burst stays within the line.
- A miss writes the dirty victim back as one 8-beat burst, refills the line
  with one 8-beat read, and retries the lookup.
- Flush walks all lines, writes back the dirty ones and invalidates
  everything.

The cache only sees host and walker traffic. The walker's traffic is single
beats, and much of the host's is too. So a simple blocking design is enough.
Long DMA bursts would stall it, which is the reason for the bypass.

## DRAM delayer

The delayer sits between the mux and the DRAM controller port. AW, W and AR
pass straight through. Each R beat and each B response from DRAM is written
into a FIFO together with a free-running cycle stamp. It is released once
`dram_delay_i` cycles have passed, with a minimum of one cycle.

Bursts keep their one-beat-per-cycle rate, shifted by the delay. The FIFOs are
1024 entries deep, so a 1000-cycle delay does not throttle a streaming
burst. When a FIFO fills up, it back-pressures DRAM.

## Crossbar and IDs

Each crossbar master has a demux that decodes AW and AR against the rule
table. The first matching rule wins, and an address that matches no rule goes
to the last slave. A master changes target slave in a direction only when it
has nothing outstanding in that direction. This keeps AXI's same-ID ordering
without ID tracking.

Each slave has a round-robin mux. The mux shifts the ID left by its select
width and puts the input index in the low bits. B and R are routed back by
those bits and the ID is shifted back. W beats follow the AW order through a
small FIFO.

Two levels of muxing add 3 ID bits in total: 2 in the crossbar and 1 at the
DRAM mux. So **external masters must use IDs below 32**. Assertions check
this.

## Top-level interface

- **AXI ports:**
  - `host_req_i` / `host_rsp_o`: host master.
  - `dev_req_i` / `dev_rsp_o`: accelerator DMA, with IOVAs and the device ID
    in `user`.
  - `ext_req_o` / `ext_rsp_i`: default slave.
  - `dram_req_o` / `dram_rsp_i`: DRAM controller.
- **Configuration and status:** `dram_delay_i[15:0]`, `ddtp_mode_i`,
  `ddtp_ppn_i[43:0]`, `iommu_inval_i`, the fault and statistics outputs,
  `llc_flush_i` and `llc_flush_busy_o`.
- **Clock and reset:** one clock, `clk_i`, and an active-low asynchronous
  reset, `rst_ni`.

## Where this departs from the prototype it models

- **Single clock domain.** The prototype's accelerator runs in a slower clock
  domain than the host. Here everything runs on one clock. The crossing
  belongs on the accelerator side of `dev_req_i`.
- **IOMMU control interface.** The IOMMU has the translation path of the
  RISC-V IOMMU v1.0 for one-level device directories, base-format contexts
  and Sv39 first stage. It has none of the following:
  - memory-mapped registers;
  - command queue;
  - fault queue in memory;
  - interrupts or MSI;
  - second-stage (G-stage) translation;
  - process contexts;
  - A/D bit updates (A/D bits are not checked).

  Configuration, invalidation and fault reporting are plain ports.
- **One translation at a time** in the IOMMU, and one transaction at a time in
  the LLC and L2. Neither the number of outstanding translations nor cache
  banking is known for the prototype.
- **LLC is a cache only.** The prototype's LLC can give part of its ways to
  a scratchpad. That mode is not built.
- **Design choices of this RTL.** The values of the address map, the alias
  offset, the ID and user widths, the cache geometry (only the 128 KiB total
  is given) and the delayer depth were all chosen for this design.
- **Not included.** The host core, the accelerator cluster (cores, L1
  scratchpad, DMA engine, instruction cache), the boot ROM, the interrupt
  controllers, the UART/GPIO/JTAG and the DDR controller are not part of the
  RTL.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Shared testbench code:

- `axi_mem_model.sv`: a sparse behavioural AXI memory with fixed latency and
  an optional error window. It stands in for the DRAM controller.
- `axi_tb_tasks.svh`: AXI master tasks.
- `iommu_tb_pt.svh`: builds device directories and Sv39 page tables in a
  memory model.

The main checks of each testbench:

- **`tb_axi_sram`:** random bursts with strobes against a reference copy;
  one beat per cycle.
- **`tb_axi_mux`, `tb_axi_xbar`:** concurrent masters, data integrity, ID
  routing and decoding, including the default slave.
- **`tb_llc_bypass_demux`:** the cached window, the reserved half, the alias
  with the offset removed, and each path's responses.
- **`tb_axi_llc`:**
  - small geometry, so that evictions are frequent;
  - random traffic against a reference copy;
  - hit with no memory traffic, dirty write-back and refill bursts;
  - flush leaving DRAM up to date.
- **`tb_axi_delayer`:** the added latency grows exactly with `delay_i`; data
  passes intact.
- **`tb_iommu_iotlb`, `tb_iommu_ptw`:** superpage reach, device tagging,
  replacement, the number of sequential walk reads per page size, and fault
  causes.
- **`tb_iommu`:** Bare and 1LVL translation with read-back data, IOTLB hit
  versus miss latency, DDTC reuse, faults with SLVERR, and invalidation.
- **`tb_iommu_svm_soc`:** the end-to-end test, described below.

`tb_iommu_svm_soc` runs the top with every parameter at its default, and a
DRAM delay of 200 cycles. It does one axpy offload (y = a·x + y on 4096 int32
elements) both ways, and the testbench acts as the accelerator's DMA:

- **Copy-based offload.** IOMMU in Bare mode. The host copies x and y into the
  reserved DRAM half, the "device" computes on physical addresses, and the
  host reads y back.
- **Zero-copy offload.** The host writes x and y through the cache, flushes
  the LLC, and writes the page tables and device context. It posts a mailbox
  in L2 and rings a doorbell on the external port. The device then works on
  IOVA + offset through the IOMMU.

At the end the testbench provokes an unmapped access and checks the fault.

It checks every result word. It also counts that each mechanism happened at
least once:

- IOTLB hit, walk, device-context fetch and fault;
- LLC hit, refill and write-back;
- alias bypass, and bypass of the reserved half;
- bursts longer than a line reaching DRAM;
- L2 and external-port accesses;
- the delayer latency.

It also reports the average walk time, which in this test is about 10 cycles
against a 200-cycle DRAM. The walker hits in the LLC.

### Translation cost at full axpy size

`tb_workload_axpy` runs the DMA traffic of axpy with 32768 elements per
vector: 32 pages each for x and y. It runs this at DRAM delays of 200, 600
and 1000 cycles, in three configurations:

- **base:** no translation (Bare mode);
- **IOMMU + LLC:** the page tables are written through the LLC after a flush;
- **IOMMU, no LLC:** the page tables are in the uncached reserved half.

For every 2 KiB tile the testbench reads x and y with one 256-beat burst each
and writes y back. The DMA runs one burst at a time with no compute time, so
the run is fully memory-bound. That is the worst case for translation.

With a 4-entry IOTLB, each new page of x and of y costs exactly one walk. The
measured DMA times are:

| DRAM delay | base | IOMMU + LLC | IOMMU, no LLC |
|---|---|---|---|
| 200 | 89 152 | +0.80 %, walk 10 cycles | +45.0 %, walk 625 cycles |
| 600 | 165 952 | +0.43 %, walk 10 cycles | +70.9 %, walk 1 837 cycles |
| 1000 | 242 752 | +0.29 %, walk 10 cycles | +80.5 %, walk 3 050 cycles |

The testbench checks:

- every result word;
- the number of walks;
- that walks through the LLC take less than one DRAM access;
- that uncached walks take at least three;
- that the overhead with the LLC stays below 2 %.

## Simulating

A testbench builds with Verilator 5 from the repository root. For example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -yrtl -ytb \
    rtl/axi_pkg.sv rtl/iommu_pkg.sv tb/tb_iommu_svm_soc.sv \
    --top-module tb_iommu_svm_soc -Mdir obj_tb -o sim
./obj_tb/sim
```

Replace `tb_iommu_svm_soc` with any other testbench name. The end-to-end run
takes a few seconds. The block testbenches override parameters (a smaller
LLC, shorter latencies) where that makes corner cases more frequent. The
design is two-state-clean: every register that is read is reset.
