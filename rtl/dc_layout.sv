// dc_layout -- address decoding for the in-package DRAM cache and the tag probe.
//
// The DRAM cache keeps page data and per-set metadata apart. Data: the 4 KB page held by way w of
// set s sits at frame s*4 + w, so the four ways of a set are neighbours and every 8 KB DRAM row
// holds two pages. Metadata: 32 bytes per set in a tag region of its own (256 sets per 8 KB tag
// row). This block splits a physical address into page number, set (low 16 page-number bits),
// tag (high 20 bits) and line, forms the in-package address of the line for a given way and the
// address of the set's metadata, and performs the tag probe: given the set's raw metadata, it
// tells whether the page is among the valid cached pages, in which way, and whether it is dirty.
// The tag probe is used for LLC dirty evictions, which carry no mapping, when the tag buffer does
// not know the page either.
//
// Interface and timing: purely combinational.
//
// From the paper: 48-bit addresses, 4 KB pages, 2^16 sets, 20-bit tags, 8 KB rows holding two
// pages, 32-byte set metadata in separate tag rows, the cached-entry fields (tag, count, V, D).
// This design's choices: the set index is the low page-number bits, the frame numbering
// set*4 + way, and the metadata region placed directly above the 1 GB data region.
// Most output bits are plain slices of addr (set, tag, line offset): the block is address
// wiring plus the probe comparators, so synthesis reports those outputs as driven from inputs.
module dc_layout
  import banshee_pkg::*;
(
  input  paddr_t              addr,
  input  way_t                way,
  input  logic [META_W-1:0]   meta_raw,
  output ppn_t                ppn,
  output dset_t               set,
  output dtag_t               tag,
  output dcaddr_t             data_addr,   // line address in the DRAM cache for (set, way)
  output dcaddr_t             meta_addr,   // set metadata address
  output logic                probe_hit,
  output way_t                probe_way,
  output logic                probe_dirty
);
  set_meta_t m;

  always_comb begin
    ppn       = pa_ppn(addr);
    set       = ppn_set(ppn);
    tag       = ppn_tag(ppn);
    data_addr = dc_data_addr(set, way, {addr[PAGE_OFF_W-1:LINE_OFF_W], {LINE_OFF_W{1'b0}}});
    meta_addr = dc_meta_addr(set);

    m           = meta_unpack(meta_raw);
    probe_hit   = 1'b0;
    probe_way   = '0;
    probe_dirty = 1'b0;
    for (int w = NUM_WAYS-1; w >= 0; w--)
      if (m.cached[w].v && m.cached[w].tag == tag) begin
        probe_hit   = 1'b1;
        probe_way   = WAY_W'(w);
        probe_dirty = m.cached[w].d;
      end
  end

endmodule
