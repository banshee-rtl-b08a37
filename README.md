# Banshee DRAM-cache memory controller

SystemVerilog for the hardware side of Banshee. Banshee is a page-granularity DRAM cache in
in-package DRAM that tracks its contents through the page tables and TLBs instead of tags, and
replaces pages with a sampled, bandwidth-aware frequency-based policy (FBR).

The design is one memory controller (`banshee_mc`). It sits between the last-level cache (LLC) and
two DRAMs:

- the in-package DRAM, used as a 1 GB, 4-way, 4 KB-page cache;
- the off-package main memory.

## What it does

- **Mapping carried by requests.** Every LLC miss carries its page's mapping (cached bit and 2 way
  bits) taken from the TLB. The controller never looks tags up on a normal access. It goes straight
  to the right DRAM, so hits and misses move only the 64 B line.
- **Tag buffer** (`tag_buffer`, 1024 entries, 8-way). It holds mappings changed by hardware that
  the page tables do not yet reflect (remap = 1). A tag-buffer hit overrides the mapping the request
  carries. Empty entries cache the mappings of LLC misses (remap = 0), replaced by LRU among
  remap = 0 entries. These entries save tag probes on dirty evictions.
- **Dirty evictions.** They carry no mapping. When the tag buffer misses, the controller reads the
  set's 32 B metadata and compares tags (a tag probe).
- **Sampling** (`sample_ctrl`). An access is sampled with probability: recent DRAM-cache miss
  rate × sampling coefficient (10 %). Only sampled accesses read and write metadata.
- **FBR step** (`fbr_update`, Algorithm 1 of the paper), on the set metadata of 4 cached entries
  {tag, count, valid, dirty} and 5 candidate entries {tag, count}:
  - A tracked page's counter is incremented.
  - A candidate replaces the least-counted cached page if its count exceeds that page's count by
    more than the threshold (64 lines × 0.1 / 2 = 3.2, used as 3).
  - A saturated counter (31) halves every counter of the set.
  - An untracked page takes over a random candidate with probability 1/count.
- **Replacement.** A dirty victim page is copied back to main memory. The new page is copied in.
  Both new mappings go into the tag buffer with remap = 1. Traffic is the metadata plus one page,
  and twice the page when the victim is dirty.
- **Page-table update.** The tag buffer raises `irq` when 70 % of it holds remap = 1 entries
  (717 of 1024). Software then does the following:
  1. sets `sw_lock` (no replacement happens while set; accesses go on);
  2. reads every entry through the memory-mapped `sw_rd_*` port;
  3. updates the PTEs and shoots down the TLBs;
  4. pulses `sw_clear_remap`;
  5. releases the lock.

## Files

| File | Contents |
|---|---|
| `rtl/banshee_pkg.sv` | Constants (48-bit PA, 4 KB page, 2^16 sets, 20-bit tag, 4 ways, 5 candidates, 5-bit counters) and types: metadata entries, requests, events. Also pack/unpack and address helpers. |
| `rtl/tag_buffer.sv` | Tag buffer: lookup, update, masked LRU, remap counter, interrupt, software port. |
| `rtl/sample_ctrl.sv` | Miss-rate window, sampling decision, LFSR random numbers. |
| `rtl/fbr_update.sv` | One FBR step on a set's metadata (combinational). |
| `rtl/dc_layout.sv` | Address split, data and metadata addresses, tag probe (combinational). |
| `rtl/banshee_mc.sv` | Top: request state machine joining the four blocks. |
| `tb/tb_*.sv` | One self-checking testbench per block. `tb_banshee_mc` is the end-to-end test at the default size. |
| `tb/dram_model.sv` | Behavioural DRAM with fixed latency, used by the end-to-end test. |

## Interfaces and timing

- **Handshakes.** All ports use valid/ready, and the controller handles one request at a time.
- **LLC request (`llc_req_t`).** Fields: address, write, map_valid, mapping, 512-bit data.
- **DRAM request (`dram_req_t`).** Fields: 31-bit device address, write, meta, 512-bit data.
  - meta = 1 marks a 32 B metadata transfer in the low 256 bits.
  - Reads return one response each, in order, after any latency.
- **DRAM-cache address map.**
  - Data of (set, way) sits at `(set*4 + way)*4096`.
  - Set metadata sits at `2^30 + set*32`.
- **Read latency.** With DRAMs of latency L, a read answers L + 3 cycles after it is accepted,
  whether it hits or misses the DRAM cache.
- **Sampled accesses** add the metadata read and write after the response. A replacement adds
  128 or 256 line transfers before the next request is accepted.
- **Reset.** Synchronous and active-low. It empties the tag buffer, and the miss rate starts at 1.0.
- **Events.** `ev` gives one-cycle event pulses for performance counters.

## Verification

Every testbench ends with a `TB_RESULT checks=… failures=…` line.

- **`tb_fbr_update`** compares the block with a reference model.
  - Directed cases cover the threshold edge, halving, take-over probability, blocked replacement
    and invalid ways.
  - 20000 random cases follow.
- **`tb_tag_buffer`** covers the masked LRU, refusal in a full set, and the interrupt at exactly
  717 remap entries. It also checks the software read port and clearing the remap bits.
- **`tb_sample_ctrl`** checks the sampler cycle by cycle against reference LFSRs and windows, plus
  known rates (25 % misses give a 2.5 % sample rate).
- **`tb_dc_layout`** checks 20000 random addresses and probes.
- **`tb_banshee_mc`** runs the top at its default parameters with two DRAM models for about one
  million LLC reads and dirty evictions.
  - It plays the page table, the TLBs and the flush routine.
  - It checks the data returned against a golden copy, and the latency of every read.
  - It checks the bytes moved by every request against the traffic the paper's Table 1 gives for
    Banshee.
  - It fails if any mechanism never happened: tag-buffer hit, allocation, probe, hit, miss,
    sampling, insertion, replacement, write-back, halving, dirty marking, blocked replacement, or
    a complete flush.

Each testbench was also run against a copy of its module with one deliberate bug (for example, the
FBR threshold test written as >= instead of >), and each copy made its testbench fail.

## Choices where the paper is silent

- Tag-buffer index = low page-number bits. True LRU by per-way ages.
- The tag-buffer fill level counts only remap = 1 entries, since remap = 0 entries can be dropped.
- A remap = 0 write never overwrites an entry already holding the page.
- A replacement needs two tag-buffer ways free of remap = 1 entries in the page's set.
- Miss rate is measured over windows of 1024 accesses. The random numbers come from 32-bit LFSRs.
- Invalid cached ways are filled first. The evicted page stays as a candidate with its count.
- A dirty eviction into a cached page sets its dirty bit with a metadata read-modify-write.
- One request is in flight. Replacement is done in-line.

## Differences from the paper

- **Page size.** Table 2 lists "4096 KB". The text says 4 KB pages, and this design uses 4 KB.
- **Metadata placement.** The paper places the 32 B set metadata in tag rows next to the data rows
  (Fig. 6), within the 1 GB. Here it is a separate 2 MB region above the 1 GB of data. Traffic is
  the same; row-buffer locality is not modelled.
- **Large pages (2 MB).** Not built: the paper leaves the partitioning of the cache between page
  sizes open. Also not built: the memory-controller bit appended to cachelines and the
  sampling coefficient of 0.001. The coefficient alone would fit as a parameter value.
- **Associativity.** The associativity sensitivity study (1, 2 and 8 ways) needs other package
  constants and, for 8 ways, a larger metadata format. Only 4 ways is built.
- **BATMAN.** The bandwidth-balancing extension is not built.
- **Software and host.** The page-table and TLB extension, the reverse mapping, the TLB shootdown
  and the interrupt routine are software or host-CPU parts. The testbench plays them. The CPU,
  the LLC and both DRAMs are outside the design.
- **Concurrency.** The paper does not describe the controller's pipeline or how replacement
  traffic is scheduled. This one serves one request at a time and finishes a replacement before
  the next request, so it shows the traffic but not the timing of an overlapped controller.
- **Multiple controllers.** The paper has one tag buffer per controller. One controller is built,
  and the page-to-controller mapping is not given in the paper.

## Tool notes

- Verilator lint reports unused signals only: sub-block outputs not needed by the top, and bits
  of package helper-function arguments. The top's opening comment explains them.
- Yosys synthesizes the top with no black boxes. The tag buffer's 1024 entries map to memories.
