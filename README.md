# H2M2: an asymmetric-memory LLM inference board in SystemVerilog

Generating tokens with a large transformer model (an LLM) is limited by memory. Each
decoding step streams every weight and the whole key/value (KV) cache through
the compute units, and the working set of a 70B–175B parameter model at a
realistic batch size is far larger than any stack of high-bandwidth memory.
Capacity-oriented DRAM such as LPDDR is large enough but several times
slower.

This design keeps both memories and gives each one its own accelerator chip:

- **Bandwidth side (side 0):** an accelerator next to HBM3 (96 GB, 3 TB/s).
- **Capacity side (side 1):** the same accelerator next to LPDDR5X (512 GB, 544 GB/s).
- **Link:** the two chips are joined by a fast chip-to-chip interconnect.

The work of a decoder layer is split by kernel. Each kernel class (the
qkv-linear, attention and fc layers) has its attention heads or weight
columns divided between the two sides. Each chip then works mostly on data in
its own memory.

The hardware's job is to make that split cheap to set up and cheap to change
while the model runs. The KV cache grows with every token, and requests
join and leave the batch. Three mechanisms do this:

1. **One logical address space.** Every chip has an MMU with a TLB and a flat
   page table of 2 MB pages. A kernel addresses tensors by logical address.
   The host driver decides, page by page, which physical memory holds the
   data. It can change that decision by rewriting page-table entries and
   flushing the TLBs. The kernels need not be recompiled.
2. **Direct remote access.** A page-table entry may point into the *other*
   chip's memory. The access then travels over the interconnect and is served
   by the other chip's memory controller, with no copy and no software
   involvement. The capacity side can, for example, write its share of a
   layer's output straight into HBM.
3. **Hardware kernel synchronisation.** Both chips finish a step before the
   next one starts. Kernels are launched with a mask of events they wait for,
   and a hardware scheduler holds them back until those events have been
   recorded, much like CUDA events.

The RTL here implements the two accelerator chips, their MMUs, memory
controllers and interconnect, and the synchronisation controller. It does not
implement the DRAM devices, the PCIe host link or the host software that
decides the mapping. Their boundaries are plain ports.

## Block structure

```
                 host driver (launches, page tables, TLB flush, event clear)
                                      |
                             +----------------+
                             |   sync_ctrl    |  kernel table, event register
                             +----------------+
                     cores 0-3 |            | cores 4-7
          +--------------------+--+      +--+--------------------+
          | accel_chip (side 0)   |      | accel_chip (side 1)   |
          |  4 x accel_core       |      |  4 x accel_core       |
          |       |               |      |       |               |
          |      mmu (tlb)        |      |      mmu (tlb)        |
          |       |               |      |       |               |
          |    mem_ctrl ----------+------+--- mem_ctrl           |
          +-------|---------------+ chip_link ---|---------------+
                  |                              |
                HBM port                    LPDDR port
```

| File | Role |
|------|------|
| `rtl/h2m2_pkg.sv` | Shared types: rows, memory requests, link messages, core commands, kernels, INT8 requantisation |
| `rtl/h2m2_top.sv` | The board: two chips, interconnect, synchronisation controller |
| `rtl/accel_chip.sv` | One chip: four cores, MMU, memory controller |
| `rtl/accel_core.sv` | One core: scratchpad, four compute units, DMA engine, compute engine |
| `rtl/mm_unit.sv` | 128x128 weight-stationary systolic array with per-column accumulation buffers |
| `rtl/mv_unit.sv` | 32 lanes of 128-wide dot products (GEMV) |
| `rtl/vector_unit.sv` | 128-lane element-wise ADD/SUB/MUL/DIV |
| `rtl/sfu.sv` | 128-lookup-per-cycle table and 128-input adder tree |
| `rtl/spm.sv` | Double-buffered scratchpad, 2 x 16 MB per core |
| `rtl/tlb.sv` | 2048-entry TLB |
| `rtl/mmu.sv` | Arbitration of core requests, translation, single-access page walk, fault reporting |
| `rtl/mem_ctrl.sv` | Local/remote routing, serving the other chip's requests |
| `rtl/chip_link.sv` | Two-channel interconnect model with latency and back-pressure |
| `rtl/sync_ctrl.sv` | Event-based kernel scheduler for all eight cores |

Everything moves in **rows** of 128 bytes: memory transfers, scratchpad
words and the operands of the 128-wide units. All data are INT8, and all
accumulators are 32-bit.

## One address space over two memories

### Addresses and page-table entries

| Item | Value |
|------|-------|
| Logical address | 40 bits (1 TB space): 19-bit virtual page number + 21-bit offset (2 MB pages) |
| Physical address | 40 bits per side: 19-bit physical page number + the same offset |
| Page table | Flat: 2^19 entries of 8 bytes = 4 MB, held in the side's own memory at `pt_base[side]` |

The entry for page `vpn` is at `pt_base + vpn*8`. Sixteen entries share one
128-byte row.

The entry layout (64 bits) is:

| Bits | Meaning |
|------|---------|
| 63 | valid |
| 62 | remote: the page lives in the *other* side's memory |
| 18:0 | physical page number, in the memory of whichever side bit 62 selects |
| others | ignored |

Each side has its own page table, so the same logical page can be:

- **Local** on one side and **remote** on the other. The data is kept once,
  and the far chip reaches it over the link.
- **Duplicated**, with both sides mapping it locally to their own copy. This
  suits small, read-mostly tensors such as activations, which both chips
  need.
- **Unmapped** on a side that never touches it.

### Translation (`mmu`, `tlb`)

The MMU serves the four cores of its chip round-robin, one request at a
time:

1. **Translate.** The TLB is direct-mapped on the low bits of the page
   number. On a hit, the physical request reaches the memory controller two
   cycles after the core's request.
2. **Walk.** On a miss, the MMU reads the one row that holds the entry. A
   flat table needs exactly one memory access per miss, which is the reason
   for using one. It then fills the TLB if the entry is valid.
3. **Fault.** An invalid entry is a page fault. The request is answered with
   `err` set and zero data. The core sets its sticky `fault` flag, and the
   MMU's `page_faults` counter counts the event. Invalid entries are not
   cached.

The MMU also counts `tlb_hits` and `tlb_misses`.

The TLB has 2048 entries. With 2 MB pages it covers 4 GB per chip, far
less than the hundreds of GB a decoding step streams. Weights and KV cache
are read sequentially, though, so a miss comes at most once per 2 MB page,
which is one page walk per 16384 row transfers.

The latency of a miss is the page walk's DRAM read. The paper quotes 300 ns
for a TLB miss. Here the miss costs what the memory model charges, plus a
few cycles.

### Changing the mapping

A driver moves a page from one memory to the other in five steps:

1. Map a free frame of the destination memory at a spare logical page.
2. Have a core on the destination side copy the page. It does a `LOAD`
   from the old logical page, which is still mapped and so is read
   remotely, then a `STORE` to the spare page. No host copy is needed.
3. Rewrite the entry in each side's table.
4. Pulse `tlb_flush[side]` on every side whose TLB may hold the old entry.
   The flush clears every entry in one cycle and wins over a fill in that
   same cycle.
5. Launch the next kernels.

Allocation for a growing KV cache is the same operation without the copy:
write a new entry, then flush.

The TLB is not coherent with the table. The flush is the only way an updated
entry becomes visible. Do it between steps, when no kernel of that side is
running.

The end-to-end test does exactly this. The HBM side first reads the capacity
side's KV page remotely, which caches a remote entry. An HBM core then
migrates the page into a free HBM frame over the interconnect, and the driver
rewrites the entry and flushes. The next kernel reads the page locally, and
the test checks that no remote request was sent.

### A remote access (`mem_ctrl`, `chip_link`)

The memory controller of each chip has three jobs:

- **Local requests** from its MMU go to its DRAM port.
- **Remote requests** (entry bit 62 set) go out on the link.
- **Requests arriving from the other chip** are served from local DRAM, and
  their responses go back over the link.

The DRAM port answers in order, and it also acknowledges writes. The
controller keeps a small FIFO of tags (local or for-the-link), so each DRAM
response is sent to the right place.

Two priorities keep the system free of deadlock:

- Responses leaving for the link go before new remote requests.
- Local MMU requests go to DRAM before requests from the other chip.

Each MMU has one request in flight, so the other chip's requests cannot be
starved.

`chip_link` has two independent channels, one per direction. Each is a
fixed-latency pipeline (`LINK_LAT`, default 8 cycles) that ends in a
16-entry receive FIFO. The sender sees `tx_ready` low when the messages in
the FIFO plus those in flight would overflow it. This is credit-style flow
control, so nothing is ever dropped.

## Kernels, events and barriers (`sync_ctrl`)

The host launches **kernels**. A kernel is one core command, plus the core
that runs it (0–3 HBM side, 4–7 LPDDR side), plus a 32-bit `wait_mask`. The
command carries an event number `ev`.

The controller works as follows:

- **Storage.** It keeps up to 16 launched kernels in a table. `launch_ready`
  is low while the table is full.
- **Dispatch.** For each core, the oldest kernel in the table is the
  candidate. The kernels of one core run in launch order, like a CUDA
  stream. The candidate is dispatched when every event in its wait mask has
  been recorded and the core accepts it.
- **Completion.** When a core reports that a command finished, its event
  bit is set in `events`. Event 0 is used here as a "nobody waits for this"
  event.
- **Reuse.** The host clears events with `ev_clear` before it reuses them.

A barrier between two steps of a layer is just a wait mask: every kernel of
step 2, on both chips, waits on the events of the last kernels of step 1.
Since the wait is only at the head of each core's queue, launches must be
made in dependency order.

`dep_wait_cycles` counts the cycles in which some core's head kernel is held
back by its mask. `dispatched` counts the kernels started.

## Inside a core

A core has four compute units around one scratchpad (SPM). The SPM has two
buffers of 131072 rows (16 MB each). At any time one buffer is the
**compute** buffer and the other the **DMA** buffer. Two engines work at once:

- The **DMA engine** moves rows between memory (logical addresses, through
  the chip's MMU) and the DMA buffer.
- The **compute engine** streams rows of the compute buffer through one unit
  and writes the results back into the compute buffer.

`OP_SWAP` exchanges the two buffers once both engines are idle. While one
tile is being computed, the next is loaded. `overlap_cycles` counts the
cycles in which both engines were busy.

| Command | Engine | Effect |
|---------|--------|--------|
| `OP_LOAD` | DMA | `len` rows from `vaddr` into DMA-buffer rows `d..` |
| `OP_STORE` | DMA | DMA-buffer rows `a..` to `len` rows at `vaddr` |
| `OP_SWAP` | both | Exchange the buffers |
| `OP_MM_W` | compute | Load the MM unit's weights from rows `b..b+127` (row `b+k` holds weights for input element `k`) |
| `OP_MM` | compute | For `len` activation rows `a+i`: `d+i = requant(a_row · W)`; `acc` adds onto the previous K tile |
| `OP_MV` | compute | `x` = row `a`; byte `i` of row `d` = `requant(x · row b+i)`, for `i < len ≤ 128` |
| `OP_VEC` | compute | `d+i = a+i (ADD/SUB/MUL/DIV) b+i`, saturating |
| `OP_SFU_LUT` | compute | Load the 256-entry lookup table from rows `a`, `a+1` |
| `OP_SFU_ACT` | compute | `d+i = LUT(a+i)`, byte by byte (activation functions) |
| `OP_SFU_SUM` | compute | 32-bit word `i` of row `d` = sum of the bytes of row `a+i` (adder tree) |

`requant(v) = saturate_int8(v >>> shift)`, where `shift` is part of the
command.

A DMA command and a compute command can be accepted back to back. A command
for a busy engine, or a swap while either engine is busy, waits at
`cmd_ready`. Each engine reports its completions on its own `done` port,
with the command's event.

### Compute units

**MM unit (systolic array).** 128 x 128 processing elements hold one weight
each (weight-stationary):

- **Loading weights.** Weights are shifted in from the top, one row per
  cycle, for 128 cycles.
- **Streaming activations.** Activation vectors enter from the left, skewed
  by one cycle per row, and move right. Partial sums move down.
- **Output.** Under each column, a 128-entry accumulation buffer either adds
  the arriving sum to the stored one or replaces it. This is how long
  reductions are split into K tiles.
- **Timing.** The unit accepts one vector per cycle. A result appears
  `ROWS+COLS` cycles after its vector. A GEMM of `len` rows takes
  `len + 2*MM_DIM + 2` cycles in the core.

**MV unit (GEMV).** 32 lanes, each a 128-element dot product followed by an
adder tree and an accumulate-or-load adder:

- **Loading.** Matrix rows are loaded one per cycle into lane `i mod 32`.
- **Firing.** A group fires when its 32nd row (or the last row) arrives.
- **Timing.** Results leave 3 cycles later.

This unit serves the batching-incompatible attention kernels.

**Vector unit.** 128 lanes of saturating INT8 add, subtract, multiply
(product shifted right by `shift`) and divide. Division by zero gives +127,
or −128 for a negative dividend. Latency is one cycle.

**SFU.** A 256-entry INT8 lookup table, indexed by the input code, that
answers 128 lookups per cycle. Beside it is a 128-input adder tree for row
sums, used for softmax and normalisation denominators. Latency is one cycle.

## Sizes

| Parameter | Default | Source |
|-----------|---------|--------|
| Systolic array | 128 x 128 | Paper |
| MV unit | 32 lanes x 128 | Paper |
| Vector unit / SFU lanes | 128 | Paper |
| Lookup rate | 128 per cycle | Paper |
| SPM per core | 2 x 16 MB (131072 rows of 128 B) | Paper |
| Cores per chip / chips | 4 / 2 | Paper |
| TLB entries per MMU | 2048 | Paper |
| Page size, logical space, table size | 2 MB, 1 TB, 4 MB | Paper |
| Accumulation buffer depth per column | 128 | This design |
| Kernel table | 16 slots | This design |
| Events | 32 | This design |
| Link latency | 8 cycles | This design |
| Link receive FIFO | 16 | This design |
| Memory-controller tag FIFO | 8 | This design |

All sizes in the table are the RTL defaults; nothing was scaled down. The
clock is 1 GHz, so the test memories use 32 cycles for HBM and 45 cycles for
LPDDR, which are the paper's access latencies.

At these sizes the board can hold the models the paper evaluates:

| Model | Batch | Weights | KV cache | Total |
|-------|-------|---------|----------|-------|
| GPT-3 175B | 32, up to 2048 tokens | 175 GB | 155 GB | ≈ 330 GB |
| Chinchilla 70B | 64 | 70 GB | up to ≈ 344 GB at 4096 tokens | ≈ 414 GB |
| Llama-2 70B (grouped-query attention) | 128 | 70 GB | 43 GB at 2048 tokens | ≈ 113 GB |

The combined 608 GB is addressable with 19-bit page numbers on each side.
The 128-row accumulation buffer covers a batch of 128 in one pass of the
systolic array.

## Where this RTL departs from the paper

The paper gives the organisation, the unit types and sizes, the memory
abstraction (flat table, 2 MB pages, TLB size, driver-managed updates) and
event-style kernel synchronisation. It does not give the following details,
and the choices here are this design's own:

- the 128-byte row as the transfer unit;
- the entry layout;
- a direct-mapped TLB;
- one outstanding request per core and per MMU;
- the core command set and the two engines;
- requantisation by shift-and-saturate;
- the scheduler's in-order-per-core policy;
- the link protocol and its latency.

Other known differences and omissions:

- **Interconnect bandwidth.** The link carries one 128-byte row per cycle
  per direction, which is 128 GB/s at 1 GHz. The paper's 960 GB/s
  interconnect is not modelled in bandwidth, only in function.
- **Memory bandwidth.** The memory devices, their controllers and PHYs are
  outside the design. Each side has one row-wide DRAM port, so the RTL does
  not reach HBM bandwidth either. The memory controller here is only the
  routing front end.
- **One MMU request at a time.** Each MMU serialises its four cores, so
  memory-level parallelism is far below what the real memories need. The
  units and the abstraction are correct, but throughput figures from this
  RTL are not the paper's.
- **TLB miss cost.** A miss costs one memory read rather than the 300 ns the
  paper assumes.
- **Host software.** The mapping decision (a small linear program solved per
  batch/sequence change), footprint tracking and free-space management are
  host software. Tests write page tables and initial data with backdoor
  writes into the memory models. The data movement of a migration is done
  by the cores, as described above.
- **Interrupts.** Page faults are reported as flags and counters. No
  interrupt path to the host exists.
- **Chip count.** The sensitivity configurations with a second chip on one
  side would need a wider top and link. The chip itself would be reused
  unchanged.

## Simulating

All files are plain SystemVerilog. Each testbench needs the package, the RTL
directory and the testbench directory. For example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb -Itb \
    rtl/h2m2_pkg.sv tb/tb_h2m2_top.sv --top-module tb_h2m2_top -Mdir obj -o sim
./obj/sim
```

Every testbench ends with a line `TB_RESULT checks=N failures=M` and
contains a watchdog. Control state is reset. Storage arrays and datapath
registers are not, and the tests pass with random initial values in them.

`tb/dram_model.sv` stands in for HBM or LPDDR:

- a sparse row memory with a fixed latency;
- in-order responses;
- backdoor `peek`/`poke`/`set_pte` functions, so a test can play the host
  driver.

| Testbench | What it shows |
|-----------|---------------|
| `tb_mm_unit` | 8x6 array against a reference GEMM, K-tile accumulation, back-to-back vectors, latency `ROWS+COLS` |
| `tb_mv_unit` | Full and partial lane groups, accumulation over K tiles, 3-cycle latency |
| `tb_vector_unit` | All four operations on random and extreme operands, saturation, division by zero |
| `tb_sfu` | Lookup table write and read on all lanes, adder-tree sums |
| `tb_spm` | Bank separation, swap, both read ports, DMA port |
| `tb_tlb` | Fill, hit/miss, tag conflict, flush |
| `tb_mmu` | Walk address, miss then hit, remote bit, fault, flush, 2-cycle hit path, four requesters |
| `tb_mem_ctrl` | Two controllers back to back: local and remote reads and writes in both directions |
| `tb_chip_link` | Ordering, latency and back-pressure on both channels |
| `tb_sync_ctrl` | Wait masks, barriers across chips, per-core order, full table, event clear |
| `tb_accel_core` | Every command, double-buffer overlap, GEMM cycle count |
| `tb_accel_chip` | Exact TLB hit/miss counts, conflict eviction, flush and remap, remote reads and writes through a second controller, page fault, four cores at once |
| `tb_h2m2_top` | End to end at 8x8 arrays (see below) |
| `tb_h2m2_full` | The same end-to-end test with every parameter at its default; about a minute |

The end-to-end test (`tb/h2m2_e2e.svh`, shared by the last two) runs one
head-split slice of a decoder layer, in five phases:

1. **QKV GEMM.** Both sides run a GEMM for their heads. The LPDDR side
   writes its output into HBM remotely.
2. **Barrier.** Step 2 waits on both chips.
3. **Attention GEMV.** Both sides compute attention scores. The LPDDR side
   reads its query from HBM. Meanwhile the HBM core preloads its next tile.
4. **Fault.** One kernel touches an unmapped page.
5. **Migrate and recompute.** An HBM core migrates a KV page into HBM over
   the link, and the driver remaps it and flushes the TLB. An HBM core recomputes the LPDDR side's
   scores from the migrated page.

All outputs are checked against a reference model. The test also counts TLB
misses, TLB hits, remote accesses, barrier hold cycles, buffer overlap, the
page fault and the post-flush refill, and fails if any of them never
happened.

To change a size, override the parameters of `h2m2_top`:

- `SPM_ROWS`, `MM_DIM` and `TLB_ENTRIES` change the cores and MMUs.
- `SLOTS` and `LINK_LAT` change the scheduler and the link.

Widths of addresses, rows and events are in `h2m2_pkg`.
