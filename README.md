# A shared-buffer memory system for an accelerator-rich architecture

An accelerator-rich architecture (ARA) puts many specialised accelerators next to a few CPU
cores. Only a few of them are powered on at any moment. It would waste area to give each
accelerator private scratchpad memory that sits idle most of the time, so all accelerators
draw their buffers from one pool of identical banks.

The cost is an interconnect problem on both sides of the pool:

- **Towards the accelerators.** A deeply pipelined accelerator wants one element from each
  of its buffers every cycle. A shared bus with arbitration cannot give it that. A full
  crossbar from every accelerator port to every bank is too large.
- **Towards memory.** Accelerators fetch data in whole pages, so one transfer is long. If
  several such bursts queue on the same memory port, an accelerator waits for all of its
  inputs before it can start.

This RTL is the accelerator-side memory system of the ARAPrototyper platform, designed for a
Zynq-class FPGA SoC. It has these parts:

- a pool of shared buffer banks;
- a *partial* crossbar that gives each accelerator port a dedicated, arbitration-free path to a
  bank;
- DMA controllers (DMACs), each on its own physical memory port, reached through an
  *interleaved* network;
- an IOMMU that translates the accelerators' virtual addresses page by page, hands TLB misses
  to software in batches, and spreads the pages over the DMACs;
- a choice of coherency: straight to DRAM on four ports, or through the CPU's last-level cache
  on one port;
- an AXI4-Lite register file through which the CPU runs it all.

The accelerators themselves, the CPU, the DRAM controller and the system software are not
part of this RTL. Their signals are ports of the top module `ara_top`.

```
 accelerator ports (37)        request FIFOs (5)           CPU (AXI4-Lite)
        |                            |                           |
  +-----v------------+         +-----v------+            +-------v------+
  | partial_crossbar |<--------|            |<-----------|  ctrl_regs   |
  |   (layer 1)      |  sel    |   iommu    | fill/batch |              |
  +-----+------------+         |  tlb, perf |            +--------------+
        | port A               +-----+------+
  +-----v------------+               | page commands
  | shared_buffer x32|         +-----v------+
  +-----^------------+  port B |  dmac x4   |
        |                      +-----+------+
  +-----+--------------+             | AXI
  | interleaved_network|<------------+
  |   (layer 2)        |       +-----v--------+
  +--------------------+       | mem_port_mux |--> HP0..HP3 (DRAM)  or  ACP (L2)
                               +--------------+
```

## Default configuration

All defaults live in `rtl/ara_pkg.sv`. They reproduce the platform's four-kernel
medical-imaging example.

| Item | Value |
|---|---|
| Accelerators | gradient ×2 (6 ports, 5 parameters each), segmentation (8 ports, 13 parameters), rician (12 ports, 7 parameters), gaussian (5 ports, 7 parameters) |
| Accelerator ports | 37 in total, numbered in the order above: 0–5, 6–11, 12–19, 20–31, 32–36 |
| Shared buffers | 32 banks of 16 KB, held as 4096 × 32-bit words |
| Crossbar connectivity | c = 3, i.e. any three accelerators may be active at once |
| DMACs | 4, one per HP port; AXI INCR bursts of 16 beats |
| Page | 4 KB (1024 words), the unit of every transfer |
| TLB | 32768 entries, 2-way set-associative, LRU |
| Miss batch | up to 8 virtual page numbers handed to software at once |
| Reset modes | coherent at DRAM; intra-accelerator interleaving |

The example specification of the platform lists an 8K-entry TLB. Its evaluation picks 32K
entries as the point beyond which the miss rate stops falling. The RTL uses 32K. Set
`TLB_ENTRIES` to change it.

## Layer 1: the partial crossbar

`partial_crossbar` has a cross point from port *p* to bank *b* only where bit `CONN[p*NUM_BUF+b]`
is set. Each port has a selection register: a bank number and an enable bit. The CPU's buffer
allocator writes it before the accelerator starts. After that the port owns its bank outright:

- no arbitration;
- one request per cycle;
- read data one cycle later.

This is what lets an accelerator keep an initiation interval of one.

A selection write is refused, and `cfg_reject` pulses (STATUS bit 2), in two cases:

- the pair has no cross point;
- the bank is already selected by another port.

So the hardware never lets two ports drive one bank. An assertion checks the same rule.

### How the default topology is built

The platform derives the topology with an optimiser that finds the fewest cross points. Its
algorithm is published elsewhere and is not reproduced here. The function
`partial_crossbar_conn()` in `ara_pkg` builds the topology from the optimiser's stated key idea
instead:

1. Sort the accelerators by port count. The `c` largest are the *primaries*. Each primary port
   gets exactly one dedicated bank:
   - rician → banks 0–11;
   - segmentation → banks 12–19;
   - the first gradient → banks 20–25.
2. Every port *j* of each other accelerator (the second gradient, and gaussian) gets `c` banks:
   - one of the spare banks, 26 + *j*;
   - bank *j* of the smallest primary block, 20 + *j*;
   - bank *j* of the next primary block, 12 + *j*.

This gives 59 cross points, against 1184 for a full 37 × 32 crossbar.

A bipartite-matching check over all subsets gives these results:

- **Any 3 of the 5 accelerators** can be connected at once, which is the guarantee asked for.
- **Four accelerators** can be connected at once in 4 of the 5 combinations.

The construction is simple. It is not proven to be minimal.

The host software must still solve the matching when it allocates. In the end-to-end test,
the allocator is greedy and tries the highest allowed bank first.

To use another topology, pass your own `CONN` to `ara_top`. One bit per cross point exists in
the hardware, so the mask is all that changes. Setting `NUM_BUF` equal to the port count with
an identity mask gives a private-buffer architecture.

## Shared buffers

`shared_buffer` is a true dual-port RAM with registered reads:

- port A faces the crossbar;
- port B faces the DMACs.

An accelerator can therefore compute on one bank while a DMAC fills another, or even the same
one. If both ports write the same word in the same cycle, port B wins. The RAM is written as an
array, so synthesis maps it to block RAM.

## Memory requests and the IOMMU

An accelerator asks for data by pushing a request into its own FIFO (`acc_req*`). The
request (`mem_req_t`) holds:

- a direction, READ or WRITE;
- a virtual byte address;
- a bank id;
- a word offset in that bank;
- a length in words.

A 16 KB bank holds four pages. The offset lets one request or several requests fill it.

`iommu` visits the accelerators with active requests round-robin. Each request is cut at
4 KB page boundaries: the first piece runs to the end of its page, and every later piece is a
whole page or less. For each piece:

1. The VPN (virtual page number) is looked up in `tlb`. A lookup takes two cycles: request,
   then result.
2. **On a hit,** a command with the physical address goes to a DMAC.
3. **On a miss,** the VPN joins the *miss list*, and that accelerator is parked. Other
   accelerators keep translating.

The list goes to software as one batch, raising `miss_irq` (STATUS bit 1), in two cases:

- the list is full (`MISS_BATCH`);
- no accelerator can make progress without it.

The miss handler on the CPU:

1. reads MISS_COUNT and MISS_VPN[*i*];
2. walks the page table;
3. writes each translation with FILL_VPN / FILL_PPN;
4. writes RELEASE, which clears the list. The parked requests then retry the same page.

Grouping misses this way pays the cost of entering the privileged handler once per batch
rather than once per miss.

A parked accelerator does not stop at its first missing page. While the batch is still
open, it *probes* the following pages of the same request: lookups only, with nothing sent to
a DMAC. Every probed page that also misses joins the list. A streaming request that touches
several untranslated pages therefore hands all of them to software in one batch, rather than
one per round trip. After RELEASE, the request resumes at its first missing page.

The TLB has `ENTRIES / WAYS` sets, indexed by the low VPN bits, with one LRU bit per set.
Fills have priority over lookups. A fill overwrites a way in this order of preference:

1. the way that already holds the same VPN;
2. an invalid way;
3. the LRU way.

When a fill replaces a valid entry, `tlb_evict` pulses.

After reset, or a flush (CTRL bit 8), the valid bits are cleared one set per cycle. That is
16384 cycles at the default size, during which STATUS bit 0 is set and no lookups are taken.
Clearing set by set lets the array stay a RAM.

`perf_counters` holds the two performance counters:

- **TLB accesses** count one per page piece. A retry after a miss is not counted again.
- **TLB misses** count one per missed piece, whether found by its own lookup or by a probe.
  Probes are not counted as accesses.

Both saturate. Both are cleared by CTRL bit 9. Because the traffic is streaming, the access
counter also measures the volume moved, and so the bandwidth.

`acc_mem_busy[a]` is high while accelerator *a* has any of these:

- queued requests;
- a request being cut into pages;
- pages still in a DMAC.

An accelerator waits for it to fall before it computes on prefetched data, and again after it
writes results back.

## DMACs and layer 2: the interleaved network

`dmac` executes page commands from a queue of 4. It works through each command in bursts of
up to 16 beats, with one burst outstanding at a time.

- **READ:** it issues AR, then writes each R beat into the bank. `r_ready` follows the
  network's grant, so a bank conflict simply stalls the burst.
- **WRITE:** it reads the bank one word per cycle into a two-entry queue that feeds W at one
  beat per cycle. It waits for B before the next burst.

When a command finishes, `done` pulses with the accelerator's number. The IOMMU counts these
pulses against the pages it issued.

`interleaved_network` lets every DMAC reach every bank's port B. When two DMACs address the same
bank in one cycle, the lower-numbered one is granted and the other waits a cycle. Read data
returns one cycle after the grant.

Full reach is what makes interleaving a pure IOMMU policy. The IOMMU chooses the DMAC with CTRL
bit 1:

- **intra-accelerator** (bit 1 = 1, the default): the pages of one accelerator rotate over all
  four DMACs. A stencil kernel that prefetches five or seven inputs therefore gets them on four
  ports in parallel. In the platform's measurements this mode was faster.
- **inter-accelerator** (bit 1 = 0): accelerator *a* always uses DMAC *a* mod 4. This keeps
  accelerators out of each other's way, which is fairer between them.

Measured in the unit test, on a memory that never stalls, a 4 KB page takes:

| Direction | Cycles (at most) |
|---|---|
| Read | 1024 beats + 3 per burst + 8 |
| Write | 1024 beats + 4 per burst + 8 |

## Coherency: HP ports or ACP

`mem_port_mux` implements the coherency choice, selected with CTRL bit 0.

- **Coherent at DRAM** (bit 0 = 0, the default): DMAC *i* drives HP port *i*, four ports in
  parallel. Software must invalidate cached copies of pages the accelerators write.
- **Coherent at the LLC** (bit 0 = 1): every DMAC goes through the single ACP (the CPU's
  accelerator-coherent port) into the L2 cache.
  - Reads and writes are arbitrated separately, round-robin.
  - Each grant lasts one whole burst.
  - No software coherence work is needed, but all traffic shares one port.

Change the mode only while `acc_mem_busy` is low for every accelerator.

The AXI used throughout is a subset: address, length, data, last, and valid/ready. There are
no IDs, sizes, strobes or error responses, and every beat is 32 bits.

## Register map (`ctrl_regs`)

All registers are 32 bits and all addresses are byte addresses. A write is taken when AW and
W are both valid, and B follows one cycle later. R follows AR by one cycle.

| Address | Access | Contents |
|---|---|---|
| 0x000 CTRL | RW | [0] coherent at LLC, [1] intra-accelerator interleaving |
| 0x000 CTRL | write 1 | [8] flush TLB, [9] clear performance counters |
| 0x004 STATUS | RO | [0] TLB clearing, [1] miss batch pending, [2] last crossbar write refused |
| 0x008 | RO | TLB access counter |
| 0x00C | RO | TLB miss counter |
| 0x010 | RO | MISS_COUNT: entries in the pending batch |
| 0x014 | RW | FILL_VPN |
| 0x018 | W | FILL_PPN; the write issues the fill |
| 0x01C | W | RELEASE: ends the batch |
| 0x040 + 4*i* | RO | MISS_VPN[*i*] |
| 0x100 + 4*p* | RW | crossbar port *p*: [7:0] bank, [31] enable |
| 0x400 + 0x80*a* | write | accelerator *a*: [0] start |
| 0x400 + 0x80*a* | read | accelerator *a*: [0] running, [1] done |
| 0x404 + 0x80*a* + 4*k* | RW | parameter *k* of accelerator *a* |

While a fill waits for the TLB port, further writes are held off.

## Attaching an accelerator

An accelerator uses its slice of `acc_port_req/acc_port_rdata`, its request FIFO, `acc_start`,
`acc_params` and `acc_done`. A typical run goes like this:

1. The CPU allocates banks by writing the port selections, then writes the parameters and
   start.
2. The accelerator pushes READ requests and waits for `acc_mem_busy` to fall.
3. It computes, reading and writing its ports at one element per cycle.
4. It pushes WRITE requests and waits again.
5. It raises `acc_done`.

`tb/tb_acc_model.sv` is such an accelerator: a vector square that follows this template.

## Files

| File | Contents |
|---|---|
| `rtl/ara_pkg.sv` | configuration, shared types, port numbering, crossbar construction |
| `rtl/ara_top.sv` | top level |
| `rtl/shared_buffer.sv`, `partial_crossbar.sv`, `interleaved_network.sv`, `dmac.sv`, `iommu.sv`, `tlb.sv`, `perf_counters.sv`, `mem_port_mux.sv`, `ctrl_regs.sv` | the blocks described above |
| `rtl/sync_fifo.sv` | first-word-fall-through FIFO used by the IOMMU and the DMACs |
| `tb/tb_<block>.sv` | self-checking testbench for each block |
| `tb/tb_ara_volume.sv` | full-volume workload at the default configuration |
| `tb/axi_mem_model.sv` | behavioural multi-port AXI memory with optional random stalls |
| `tb/tb_acc_model.sv` | the accelerator model |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops on its own. Each has a
watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/ara_pkg.sv tb/tb_ara_top.sv --top-module tb_ara_top -Mdir obj_ara -o sim
./obj_ara/sim +verilator+rand+reset+2
```

Replace `tb_ara_top` with any other `tb_<block>` to run that block's test. The block tests
shrink their block's parameters to run faster. `tb_ara_top` runs the top with every default
(37 ports, 32 × 16 KB banks, a 32K-entry TLB) and finishes in seconds. Its three runs each
start all five accelerators at once:

1. coherent at DRAM, intra-accelerator interleaving, cold TLB;
2. through the ACP, inter-accelerator interleaving;
3. DRAM mode with inputs that collide in one TLB set, forcing LRU evictions, plus a re-read
   input that must hit.

The test checks:

- every output word;
- both counters against the number of pages moved;
- that each run's commands went to the DMACs the interleaving mode prescribes.

It also counts how often each mechanism happened. A mechanism that never happened counts as a
failure. The mechanisms are:

- miss batches, including batches with several misses;
- fills and evictions;
- bank conflicts in the network;
- page cuts;
- reads and writes;
- refused crossbar selections.

### Streaming a whole volume

`tb_ara_volume` streams the default medical-imaging input through the top at its default
configuration. The input is 128 slices of 128 × 128 32-bit elements: 8 MB, or 2048 pages.

- It is cut into 512 bank-sized chunks of 4096 words.
- The five accelerator models take one chunk each per round.
- Each round reads four pages, computes 4096 elements, and writes four pages back.
- The volume is processed twice.

The TLB reaches 32768 × 4 KB = 128 MB, so 4096 pages (input plus output) fit easily.

| Pass | TLB accesses | TLB misses | Cycles | Words moved per cycle |
|---|---|---|---|---|
| 1, cold TLB | 4096 | 4096, in 819 batches | about 2.05 M | 2.05 |
| 2 | 4096 | 0 | about 2.03 M | 2.07 |

Miss handling is nearly invisible in the cycle count. With the simple accelerator model, each
chunk's 4096-cycle compute pass dominates. The simulation takes about a minute and a half.

## Where this RTL departs from the platform, or fills gaps

| Topic | This RTL | The platform |
|---|---|---|
| Crossbar topology | built from the optimiser's key idea | computed by the optimiser; may have fewer cross points for other configurations |
| DMAC reach | every DMAC reaches every bank | network derived from the crossbar topology; not described further |
| Modes | run-time register bits, reset to the `COHERENT_LLC` / `INTRA_ACC` parameters | chosen when the platform is generated |
| Details the platform does not give | chosen here: request format (the bank offset in particular), register map, miss-batch size, look-ahead probes and release handshake, TLB associativity, burst length, AXI subset, arbitration policies, 32-bit data width | — |
| Software | not included: accelerator manager, buffer allocator (with its starvation-free occupied/reserved flags), coherence manager, TLB miss handler, performance monitor; the end-to-end testbench plays the allocator, miss handler and monitor in simple form | part of the platform's software stack |
| Accelerators | not included; the ports are left for HLS-generated kernels | medical-imaging kernels |
| Performance numbers | not checked; the tests check function, and the DMAC page-transfer rate above | measured on the FPGA |
