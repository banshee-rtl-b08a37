// banshee_pkg -- constants and types shared by the Banshee DRAM-cache memory controller.
//
// Banshee keeps an in-package DRAM as a 4-way set-associative, page-granularity memory-side
// cache of off-package DRAM. Which pages are cached, and in which way, is recorded in the page
// tables and TLBs (a "cached" bit and two "way" bits per entry) and carried by every LLC request;
// the memory controller corrects stale mappings with its tag buffer. Each DRAM-cache set has 32
// bytes of metadata in a separate tag region of the in-package DRAM: four cached-page entries
// (tag, 5-bit frequency count, valid, dirty) and five candidate entries (tag, count).
//
// Numbers taken from the paper: 48-bit physical addresses, 4 KB pages, 64 B lines, 2^16 sets,
// 20-bit tags, 4 ways, 5 candidates, 5-bit counters, 27-bit cached and 25-bit candidate entries,
// 32-byte set metadata, 1 GB in-package capacity, tag-buffer entry fields (cached 1 bit, way
// 2 bits, valid 1 bit, remap 1 bit). This design's own choices: the bit order inside the packed
// structs (fields in the left-to-right order of the paper's drawings, MSB first), the placement
// of the metadata region directly above the 1 GB data region, and the request/response types.
package banshee_pkg;

  // ---------------------------------------------------------------- address geometry
  localparam int PA_W        = 48;                 // physical address width
  localparam int LINE_BYTES  = 64;
  localparam int LINE_OFF_W  = 6;
  localparam int PAGE_OFF_W  = 12;                 // 4 KB pages
  localparam int LINES_PER_PAGE = 1 << (PAGE_OFF_W - LINE_OFF_W);   // 64
  localparam int PPN_W       = PA_W - PAGE_OFF_W;  // 36-bit physical page number
  localparam int SET_W       = 16;                 // 2^16 DRAM-cache sets
  localparam int TAG_W       = PPN_W - SET_W;      // 20-bit tag
  localparam int NUM_WAYS    = 4;
  localparam int WAY_W       = 2;
  localparam int NUM_CAND    = 5;                  // candidate pages per set
  localparam int CNT_W       = 5;                  // frequency counter width
  localparam int CNT_MAX     = (1 << CNT_W) - 1;
  localparam int META_BYTES  = 32;                 // per-set metadata
  localparam int META_W      = META_BYTES * 8;     // 256 bits

  // In-package DRAM address space: 1 GB of page data, then the tag (metadata) region.
  localparam int     DC_ADDR_W    = 31;
  localparam logic [DC_ADDR_W-1:0] META_BASE = DC_ADDR_W'(64'h4000_0000);

  typedef logic [PA_W-1:0]      paddr_t;
  typedef logic [PPN_W-1:0]     ppn_t;
  typedef logic [TAG_W-1:0]     dtag_t;
  typedef logic [SET_W-1:0]     dset_t;
  typedef logic [WAY_W-1:0]     way_t;
  typedef logic [CNT_W-1:0]     cnt_t;
  typedef logic [DC_ADDR_W-1:0] dcaddr_t;
  typedef logic [LINE_BYTES*8-1:0] line_t;

  // Mapping carried with a request (TLB/PTE extension: cached bit + way bits).
  typedef struct packed {
    logic cached;
    way_t way;
  } mapping_t;

  // ---------------------------------------------------------------- set metadata (Fig. 5)
  typedef struct packed {                 // 27 bits
    dtag_t tag;
    cnt_t  count;
    logic  v;
    logic  d;
  } cached_ent_t;

  typedef struct packed {                 // 25 bits
    dtag_t tag;
    cnt_t  count;
  } cand_ent_t;

  localparam int META_USED_W = NUM_WAYS*$bits(cached_ent_t) + NUM_CAND*$bits(cand_ent_t); // 233

  typedef struct packed {
    cand_ent_t   [NUM_CAND-1:0] cand;
    cached_ent_t [NUM_WAYS-1:0] cached;
  } set_meta_t;

  function automatic logic [META_W-1:0] meta_pack(set_meta_t m);
    return META_W'(m);
  endfunction

  function automatic set_meta_t meta_unpack(logic [META_W-1:0] raw);
    return set_meta_t'(raw[META_USED_W-1:0]);
  endfunction

  // ---------------------------------------------------------------- address helpers
  function automatic ppn_t  pa_ppn(paddr_t a);  return a[PA_W-1:PAGE_OFF_W];            endfunction
  function automatic dset_t ppn_set(ppn_t p);   return p[SET_W-1:0];                     endfunction
  function automatic dtag_t ppn_tag(ppn_t p);   return p[PPN_W-1:SET_W];                 endfunction
  function automatic logic [PAGE_OFF_W-LINE_OFF_W-1:0] pa_line(paddr_t a);
    return a[PAGE_OFF_W-1:LINE_OFF_W];
  endfunction
  // Data layout (Fig. 5): the page of (set, way) occupies frame set*WAYS + way, so the ways of a
  // set are adjacent and two 4 KB pages share each 8 KB DRAM row.
  function automatic dcaddr_t dc_data_addr(dset_t s, way_t w, logic [PAGE_OFF_W-1:0] off);
    return DC_ADDR_W'({s, w, off});
  endfunction
  // Tag layout (Fig. 5): 32 bytes per set, 256 sets per 8 KB tag row, above the data region.
  function automatic dcaddr_t dc_meta_addr(dset_t s);
    return META_BASE + DC_ADDR_W'({s, 5'b0});
  endfunction

  // ---------------------------------------------------------------- LLC side
  // One 64 B request from the LLC. Reads are LLC misses; writes are LLC dirty evictions, which
  // carry no mapping (map_valid = 0).
  typedef struct packed {
    paddr_t   addr;       // byte address, line aligned
    logic     write;
    logic     map_valid;
    mapping_t map;
    line_t    wdata;
  } llc_req_t;

  // ---------------------------------------------------------------- DRAM side
  // A request to either DRAM: one 64 B line, or a 32 B metadata block (meta = 1, data in the
  // low 256 bits).
  typedef struct packed {
    paddr_t addr;
    logic   write;
    logic   meta;
    line_t  wdata;
  } dram_req_t;

  // Event pulses reported by the controller (one cycle each), for statistics.
  typedef struct packed {
    logic tb_hit;          // request mapping overridden by the tag buffer
    logic tb_alloc;        // non-remap entry allocated on an LLC miss
    logic probe;           // tag probe of the DRAM cache for a dirty eviction
    logic dc_hit;          // data served from in-package DRAM
    logic dc_miss;         // data served from off-package DRAM
    logic sampled;         // access chosen for a frequency-counter update
    logic cand_insert;     // new page took over a candidate entry
    logic replace;         // page brought into the DRAM cache
    logic writeback;       // dirty victim page written back
    logic halve;           // counters halved after saturation
    logic repl_blocked;    // replacement suppressed (tag buffer locked or set full)
    logic dirty_mark;      // D bit set in the metadata
  } mc_events_t;

endpackage
