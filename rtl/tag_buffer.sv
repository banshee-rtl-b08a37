// tag_buffer -- per-memory-controller table of recently changed page mappings.
//
// The tag buffer lets the memory controller change where a page lives in the DRAM cache at once,
// while the page tables and TLBs are updated later, in batches, by software. It is a
// set-associative table indexed by the low bits of the physical page number. Each entry holds
// the rest of the page number as its tag, the page's cached bit and way bits, a valid bit and a
// remap bit. remap = 1 marks a mapping that the page tables do not know yet; such an entry must
// stay until software has copied it into the page tables. remap = 0 entries hold a mapping that
// equals the page tables' and only spare the controller tag probes for LLC dirty evictions; they
// may be dropped at any time. Victims are chosen among invalid entries first, then by LRU among
// the remap = 0 entries (true LRU with per-way ages, remap bits as a mask). When the number of
// remap = 1 entries reaches FLUSH_PCT percent of the capacity, irq is raised; software then reads
// every entry through the sw_rd port, updates the page tables, and pulses sw_clear_remap, which
// clears all remap bits but keeps the entries.
//
// Interface and timing:
//   lk_*   lookup, combinational: hit, mapping, remap bit of the page, and lk_free, the number of
//          ways in the page's set not holding a remap = 1 entry. lk_touch makes the hit way MRU
//          at the next clock edge.
//   upd_*  write, committed at the clock edge when upd_valid = 1. upd_ok (combinational) tells
//          whether it can be done. If the page is present its mapping is overwritten and its
//          remap bit is ORed with upd_remap; otherwise a victim is taken. A remap = 0 write for a
//          page that is present is ignored (it carries no newer information).
//   sw_*   memory-mapped read of entry sw_rd_idx (way-major within a set: idx = set*WAYS + way),
//          combinational; sw_clear_remap clears all remap bits at the next edge.
//
// From the paper: organisation as a set-associative cache tagged by physical address, the entry
// fields and widths, 8 ways and 1024 entries, the LRU among remap = 0 entries, the interrupt at
// 70% full, clearing the remap bits after the flush. This design's choices: ages-based true LRU,
// set index from the low page-number bits, the one-write-per-cycle port, and refusing a write
// (upd_ok = 0) when every way of the set holds a remap = 1 entry. Reset is synchronous, active low.
module tag_buffer
  import banshee_pkg::*;
#(
  parameter int ENTRIES   = 1024,
  parameter int WAYS      = 8,
  parameter int FLUSH_PCT = 70
) (
  input  logic        clk,
  input  logic        rst_n,
  // lookup
  input  ppn_t        lk_page,
  input  logic        lk_touch,
  output logic        lk_hit,
  output mapping_t    lk_map,
  output logic        lk_remap,
  output logic [$clog2(WAYS+1)-1:0] lk_free,
  // update
  input  logic        upd_valid,
  input  ppn_t        upd_page,
  input  mapping_t    upd_map,
  input  logic        upd_remap,
  output logic        upd_ok,
  // software interface
  input  logic [$clog2(ENTRIES)-1:0] sw_rd_idx,
  output logic        sw_rd_valid,
  output ppn_t        sw_rd_page,
  output mapping_t    sw_rd_map,
  output logic        sw_rd_remap,
  input  logic        sw_clear_remap,
  output logic [$clog2(ENTRIES+1)-1:0] remap_count,
  output logic        irq
);
  localparam int SETS   = ENTRIES / WAYS;
  localparam int IDX_W  = $clog2(SETS);             // SETS must be a power of two, >= 2
  localparam int WSEL_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int ETAG_W = PPN_W - IDX_W;
  localparam int CNT_W_ = $clog2(ENTRIES+1);
  // irq threshold: ceil(ENTRIES * FLUSH_PCT / 100)
  localparam int IRQ_LEVEL = (ENTRIES * FLUSH_PCT + 99) / 100;

  typedef logic [ETAG_W-1:0] etag_t;
  typedef struct packed {
    etag_t    tag;
    mapping_t map;
    logic     valid;
    logic     remap;
  } tb_ent_t;

  tb_ent_t             ent [SETS][WAYS];
  logic [WSEL_W-1:0]   age [SETS][WAYS];   // 0 = most recently used
  logic [CNT_W_-1:0]   rcount;

  function automatic logic [IDX_W-1:0] set_of(ppn_t p);
    return p[IDX_W-1:0];
  endfunction
  function automatic etag_t tag_of(ppn_t p);
    return p[PPN_W-1:IDX_W];
  endfunction

  // ------------------------------------------------------------------ lookup
  logic [IDX_W-1:0]  lk_set;
  logic [WSEL_W-1:0] lk_way;
  always_comb begin
    lk_set   = set_of(lk_page);
    lk_hit   = 1'b0;
    lk_way   = '0;
    lk_map   = '0;
    lk_remap = 1'b0;
    lk_free  = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (ent[lk_set][w].valid && ent[lk_set][w].tag == tag_of(lk_page)) begin
        lk_hit   = 1'b1;
        lk_way   = WSEL_W'(w);
        lk_map   = ent[lk_set][w].map;
        lk_remap = ent[lk_set][w].remap;
      end
      if (!(ent[lk_set][w].valid && ent[lk_set][w].remap)) lk_free = lk_free + 1'b1;
    end
  end

  // ------------------------------------------------------------------ update: way selection
  logic [IDX_W-1:0]  u_set;
  logic              u_hit, u_inv, u_lru_ok;
  logic [WSEL_W-1:0] u_hit_way, u_inv_way, u_lru_way, u_way;
  logic [WSEL_W-1:0] u_best_age;
  always_comb begin
    u_set      = set_of(upd_page);
    u_hit      = 1'b0;  u_hit_way = '0;
    u_inv      = 1'b0;  u_inv_way = '0;
    u_lru_ok   = 1'b0;  u_lru_way = '0;  u_best_age = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (ent[u_set][w].valid && ent[u_set][w].tag == tag_of(upd_page)) begin
        u_hit = 1'b1;  u_hit_way = WSEL_W'(w);
      end
      if (!ent[u_set][w].valid && !u_inv) begin
        u_inv = 1'b1;  u_inv_way = WSEL_W'(w);
      end
      // masked LRU: oldest among valid remap = 0 entries
      if (ent[u_set][w].valid && !ent[u_set][w].remap &&
          (!u_lru_ok || age[u_set][w] > u_best_age)) begin
        u_lru_ok = 1'b1;  u_lru_way = WSEL_W'(w);  u_best_age = age[u_set][w];
      end
    end
    u_way  = u_hit ? u_hit_way : (u_inv ? u_inv_way : u_lru_way);
    upd_ok = u_hit || u_inv || u_lru_ok;
  end

  // write enable for a real change
  logic u_write, u_new_remap;
  always_comb begin
    u_write     = upd_valid && upd_ok && !(u_hit && !upd_remap);
    u_new_remap = upd_remap && !(u_hit && ent[u_set][u_hit_way].remap);
  end

  // ------------------------------------------------------------------ state update
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          ent[s][w] <= '0;
          age[s][w] <= WSEL_W'(w);
        end
      rcount <= '0;
    end else begin
      // LRU: promote the touched way (lookup hit or written entry) to MRU
      if (u_write) begin
        for (int w = 0; w < WAYS; w++)
          if (age[u_set][w] < age[u_set][u_way]) age[u_set][w] <= age[u_set][w] + 1'b1;
        age[u_set][u_way] <= '0;
      end else if (lk_touch && lk_hit) begin
        for (int w = 0; w < WAYS; w++)
          if (age[lk_set][w] < age[lk_set][lk_way]) age[lk_set][w] <= age[lk_set][w] + 1'b1;
        age[lk_set][lk_way] <= '0;
      end

      if (sw_clear_remap) begin
        for (int s = 0; s < SETS; s++)
          for (int w = 0; w < WAYS; w++) ent[s][w].remap <= 1'b0;
        rcount <= '0;
      end
      if (u_write) begin
        ent[u_set][u_way].tag   <= tag_of(upd_page);
        ent[u_set][u_way].map   <= upd_map;
        ent[u_set][u_way].valid <= 1'b1;
        ent[u_set][u_way].remap <= (sw_clear_remap ? 1'b0 : (u_hit && ent[u_set][u_way].remap))
                                   | upd_remap;
        if (u_new_remap || (sw_clear_remap && upd_remap))
          rcount <= (sw_clear_remap ? '0 : rcount) + 1'b1;
      end
    end
  end

  assign remap_count = rcount;
  assign irq         = (rcount >= CNT_W_'(IRQ_LEVEL));

  // ------------------------------------------------------------------ software read port
  logic [IDX_W-1:0]  r_set;
  logic [WSEL_W-1:0] r_way;
  assign r_set = IDX_W'(sw_rd_idx / WAYS);
  assign r_way = WSEL_W'(sw_rd_idx % WAYS);
  always_comb begin
    sw_rd_valid = ent[r_set][r_way].valid;
    sw_rd_page  = ppn_t'({ent[r_set][r_way].tag, r_set});
    sw_rd_map   = ent[r_set][r_way].map;
    sw_rd_remap = ent[r_set][r_way].remap;
  end

  // remap entries never exceed the capacity
  assert property (@(posedge clk) disable iff (!rst_n) rcount <= CNT_W_'(ENTRIES));

endmodule
