// banshee_mc -- Banshee memory controller: DRAM-cache access, tag buffer, sampled FBR replacement.
//
// The controller sits below the last-level cache (LLC) and in front of two DRAMs: a large
// in-package DRAM used as a page-granularity, 4-way set-associative memory-side cache, and the
// off-package main memory. It does not look tags up on the way to the data. Every LLC miss carries
// the page's mapping (cached bit, way) from the TLB; the controller only checks its tag buffer,
// which holds mappings changed since software last updated the page tables, and then sends the
// access straight to the right DRAM. A request flows through these steps:
//   1. LOOKUP   tag-buffer lookup of the page. Hit: the tag buffer's mapping is used. Miss on an
//               LLC read: the carried mapping is used and recorded as a remap = 0 entry. Miss on
//               an LLC dirty eviction (no mapping carried): PROBE.
//   2. PROBE    read the set's 32-byte metadata and compare the cached tags (dirty evictions only).
//   3. ACCESS   one 64 B read or write to the in-package DRAM (cached) or the off-package DRAM.
//               Reads answer the LLC as soon as the data returns.
//   4. SAMPLE   with probability (recent miss rate x sampling coefficient) the access updates the
//               set's frequency counters: read metadata (unless PROBE already did), run one FBR step
//               (fbr_update), write the metadata back. A write that hits the DRAM cache also
//               sets the page's dirty bit here.
//   5. REPLACE  if FBR chose to bring the page in: copy a dirty victim page back to main memory
//               (64 line reads + 64 line writes), copy the new page in (64 + 64), and record both
//               new mappings in the tag buffer with remap = 1.
// The tag buffer raises irq when 70% of it holds remap = 1 entries. Software then sets sw_lock
// (no replacement happens while it is set, accesses continue), reads the entries through the
// sw_rd port, updates the page tables through its reverse mapping, shoots down the TLBs, pulses
// sw_clear_remap and releases sw_lock. Replacement is also skipped when the page's tag-buffer
// set has fewer than two ways free of remap = 1 entries.
//
// Interfaces (all valid/ready, one request at a time):
//   llc_req_*   one 64 B request; llc_resp_valid/llc_resp_data returns read data (one cycle).
//   dc_*, mm_*  in-package and off-package DRAM ports. A request is taken when valid & ready.
//               Reads return exactly one response, in order, after any latency; writes have none.
//               dram_req_t.meta = 1 marks a 32 B metadata transfer (low 256 bits).
//   sw_*, irq   memory-mapped tag-buffer access for the page-table update routine.
//   ev          one-cycle event pulses for statistics.
// Timing, with DRAMs that answer in L cycles: an unsampled read takes 3 + L cycles from the
// accepting edge to the response (LOOKUP, ACCESS issue, wait) and the controller accepts the next
// request two cycles later; every step is a state of its own.
//
// From the paper: the request flow (tag buffer overrides the carried mapping; remap = 0 entries
// on LLC misses; tag probes for dirty evictions), no tag traffic on hits or misses, metadata
// traffic only for sampled accesses, replacement traffic of the metadata plus a page (plus the
// victim if dirty), the lock during the software update, and the parameters of its Table 2.
// This design's own choices: one request in flight, replacement performed in-line before the
// next request, the dirty-bit update done as a metadata read-modify-write, the two-free-ways
// rule, and all handshakes.
// Lint notes: some sub-block outputs are left unconnected in use (the probe's dirty bit, the
// lookup's remap bit, the sampler's rate outputs, the FBR hit flags); they exist for the
// sub-blocks' own tests and for statistics, and synthesis removes them. Verilator reports them
// as unused signals only.
module banshee_mc
  import banshee_pkg::*;
#(
  parameter int          TB_ENTRIES       = 1024,
  parameter int          TB_WAYS          = 8,
  parameter int          FLUSH_PCT        = 70,
  parameter int unsigned SAMPLE_COEFF_Q16 = 6554,
  parameter int unsigned MISS_WIN_LOG2    = 10,
  parameter int          THRESHOLD        = (LINES_PER_PAGE * int'(SAMPLE_COEFF_Q16)) / (2 * 65536)
) (
  input  logic       clk,
  input  logic       rst_n,
  // LLC
  input  logic       llc_req_valid,
  output logic       llc_req_ready,
  input  llc_req_t   llc_req,
  output logic       llc_resp_valid,
  output line_t      llc_resp_data,
  // in-package DRAM (DRAM cache)
  output logic       dc_req_valid,
  input  logic       dc_req_ready,
  output dram_req_t  dc_req,
  input  logic       dc_resp_valid,
  input  line_t      dc_resp_data,
  // off-package DRAM
  output logic       mm_req_valid,
  input  logic       mm_req_ready,
  output dram_req_t  mm_req,
  input  logic       mm_resp_valid,
  input  line_t      mm_resp_data,
  // software interface
  input  logic [$clog2(TB_ENTRIES)-1:0] sw_rd_idx,
  output logic       sw_rd_valid,
  output ppn_t       sw_rd_page,
  output mapping_t   sw_rd_map,
  output logic       sw_rd_remap,
  input  logic       sw_lock,
  input  logic       sw_clear_remap,
  output logic [$clog2(TB_ENTRIES+1)-1:0] tb_remap_count,
  output logic       irq,
  // statistics
  output mc_events_t ev
);
  localparam int LW = PAGE_OFF_W - LINE_OFF_W;   // line index within a page
  localparam int CW = $clog2(NUM_CAND);

  typedef enum logic [4:0] {
    S_IDLE, S_LOOKUP, S_PROBE_REQ, S_PROBE_WAIT, S_ACC_REQ, S_ACC_WAIT, S_POST,
    S_META_REQ, S_META_WAIT, S_FBR, S_META_WR,
    S_WB_RD, S_WB_WAIT, S_WB_WR, S_FILL_RD, S_FILL_WAIT, S_FILL_WR,
    S_TB_NEW, S_TB_OLD
  } state_t;

  state_t    st;
  llc_req_t  r;
  mapping_t  map;
  logic      have_meta;
  set_meta_t meta_buf, meta_new;
  logic      samp;
  logic [CW-1:0] rc;
  logic [15:0]   rp;
  logic      rep_go, rep_evict, rep_dirty;
  way_t      rep_way;
  dtag_t     rep_evict_tag;
  logic [LW-1:0] li;
  line_t     lbuf;

  // ------------------------------------------------------------------ request decode
  ppn_t    r_ppn;
  dset_t   r_set;
  dtag_t   r_tag;
  dcaddr_t r_data_addr, r_meta_addr;
  logic    pr_hit, pr_dirty;
  way_t    pr_way;

  dc_layout u_layout (
    .addr (r.addr), .way (map.way), .meta_raw (dc_resp_data[META_W-1:0]),
    .ppn (r_ppn), .set (r_set), .tag (r_tag), .data_addr (r_data_addr), .meta_addr (r_meta_addr),
    .probe_hit (pr_hit), .probe_way (pr_way), .probe_dirty (pr_dirty)
  );

  // ------------------------------------------------------------------ tag buffer
  logic     tb_hit, tb_remap, tb_upd_valid, tb_upd_remap, tb_upd_ok;
  mapping_t tb_map, tb_upd_map;
  ppn_t     tb_upd_page;
  logic [$clog2(TB_WAYS+1)-1:0] tb_free;

  tag_buffer #(.ENTRIES(TB_ENTRIES), .WAYS(TB_WAYS), .FLUSH_PCT(FLUSH_PCT)) u_tb (
    .clk, .rst_n,
    .lk_page (r_ppn), .lk_touch (st == S_LOOKUP), .lk_hit (tb_hit), .lk_map (tb_map),
    .lk_remap (tb_remap), .lk_free (tb_free),
    .upd_valid (tb_upd_valid), .upd_page (tb_upd_page), .upd_map (tb_upd_map),
    .upd_remap (tb_upd_remap), .upd_ok (tb_upd_ok),
    .sw_rd_idx, .sw_rd_valid, .sw_rd_page, .sw_rd_map, .sw_rd_remap,
    .sw_clear_remap, .remap_count (tb_remap_count), .irq
  );

  // ------------------------------------------------------------------ sampling
  logic          acc_fire, s_sample;
  logic [CW-1:0] s_rc;
  logic [15:0]   s_rp, s_miss_rate;
  logic [16:0]   s_rate;

  sample_ctrl #(.SAMPLE_COEFF_Q16(SAMPLE_COEFF_Q16), .MISS_WIN_LOG2(MISS_WIN_LOG2)) u_samp (
    .clk, .rst_n, .acc_valid (acc_fire), .acc_miss (!map.cached),
    .sample (s_sample), .rand_cand (s_rc), .rand_prob (s_rp),
    .miss_rate_q16 (s_miss_rate), .sample_rate_q16 (s_rate)
  );

  // ------------------------------------------------------------------ FBR step
  set_meta_t meta_d;            // metadata with this write's dirty bit applied
  logic      dirty_set;
  set_meta_t f_meta;
  logic      f_store, f_hit_cached, f_hit_cand, f_replace, f_evict_valid, f_evict_dirty;
  logic      f_halved, f_cand_insert, f_blocked;
  way_t      f_way;
  dtag_t     f_evict_tag;

  always_comb begin
    meta_d    = meta_buf;
    dirty_set = 1'b0;
    if (r.write && map.cached && meta_buf.cached[map.way].v &&
        meta_buf.cached[map.way].tag == r_tag && !meta_buf.cached[map.way].d) begin
      meta_d.cached[map.way].d = 1'b1;
      dirty_set                = 1'b1;
    end
  end

  fbr_update #(.THRESHOLD(THRESHOLD)) u_fbr (
    .meta_in (meta_d), .tag (r_tag), .rand_cand (rc), .rand_prob (rp),
    .allow_replace (!sw_lock && tb_free >= 2),
    .meta_out (f_meta), .store (f_store), .hit_cached (f_hit_cached), .hit_cand (f_hit_cand),
    .replace (f_replace), .repl_way (f_way), .evict_valid (f_evict_valid),
    .evict_tag (f_evict_tag), .evict_dirty (f_evict_dirty), .halved (f_halved),
    .cand_insert (f_cand_insert), .repl_blocked (f_blocked)
  );

  // ------------------------------------------------------------------ DRAM request muxing
  paddr_t victim_pa, new_pa;
  always_comb begin
    victim_pa = {rep_evict_tag, r_set, li, {LINE_OFF_W{1'b0}}};
    new_pa    = {r_tag, r_set, li, {LINE_OFF_W{1'b0}}};
  end

  always_comb begin
    dc_req_valid = 1'b0;
    dc_req       = '0;
    mm_req_valid = 1'b0;
    mm_req       = '0;
    unique case (st)
      S_PROBE_REQ, S_META_REQ: begin
        dc_req_valid = 1'b1;
        dc_req.addr  = PA_W'(r_meta_addr);
        dc_req.meta  = 1'b1;
      end
      S_META_WR: begin
        dc_req_valid = 1'b1;
        dc_req.addr  = PA_W'(r_meta_addr);
        dc_req.meta  = 1'b1;
        dc_req.write = 1'b1;
        dc_req.wdata = line_t'(meta_pack(meta_new));
      end
      S_ACC_REQ: begin
        if (map.cached) begin
          dc_req_valid = 1'b1;
          dc_req.addr  = PA_W'(r_data_addr);
          dc_req.write = r.write;
          dc_req.wdata = r.wdata;
        end else begin
          mm_req_valid = 1'b1;
          mm_req.addr  = r.addr;
          mm_req.write = r.write;
          mm_req.wdata = r.wdata;
        end
      end
      S_WB_RD: begin
        dc_req_valid = 1'b1;
        dc_req.addr  = PA_W'(dc_data_addr(r_set, rep_way, {li, {LINE_OFF_W{1'b0}}}));
      end
      S_WB_WR: begin
        mm_req_valid = 1'b1;
        mm_req.addr  = victim_pa;
        mm_req.write = 1'b1;
        mm_req.wdata = lbuf;
      end
      S_FILL_RD: begin
        mm_req_valid = 1'b1;
        mm_req.addr  = new_pa;
      end
      S_FILL_WR: begin
        dc_req_valid = 1'b1;
        dc_req.addr  = PA_W'(dc_data_addr(r_set, rep_way, {li, {LINE_OFF_W{1'b0}}}));
        dc_req.write = 1'b1;
        dc_req.wdata = lbuf;
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------------ tag-buffer writes
  always_comb begin
    tb_upd_valid = 1'b0;
    tb_upd_page  = r_ppn;
    tb_upd_map   = '0;
    tb_upd_remap = 1'b0;
    unique case (st)
      S_LOOKUP: begin     // remember the carried mapping of an LLC miss (remap = 0)
        tb_upd_valid = !tb_hit && r.map_valid && !r.write;
        tb_upd_map   = r.map;
      end
      S_TB_NEW: begin     // page now cached in rep_way
        tb_upd_valid = 1'b1;
        tb_upd_map   = '{cached: 1'b1, way: rep_way};
        tb_upd_remap = 1'b1;
      end
      S_TB_OLD: begin     // evicted page no longer cached
        tb_upd_valid = 1'b1;
        tb_upd_page  = {rep_evict_tag, r_set};
        tb_upd_map   = '{cached: 1'b0, way: rep_way};
        tb_upd_remap = 1'b1;
      end
      default: ;
    endcase
  end

  assign llc_req_ready = (st == S_IDLE);
  assign acc_fire      = (st == S_ACC_REQ) &&
                         (map.cached ? dc_req_ready : mm_req_ready);

  // ------------------------------------------------------------------ control
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st             <= S_IDLE;
      r              <= '0;
      map            <= '0;
      have_meta      <= 1'b0;
      meta_buf       <= '0;
      meta_new       <= '0;
      samp           <= 1'b0;
      rc             <= '0;
      rp             <= '0;
      rep_go         <= 1'b0;
      rep_evict      <= 1'b0;
      rep_dirty      <= 1'b0;
      rep_way        <= '0;
      rep_evict_tag  <= '0;
      li             <= '0;
      lbuf           <= '0;
      llc_resp_valid <= 1'b0;
      llc_resp_data  <= '0;
      ev             <= '0;
    end else begin
      llc_resp_valid <= 1'b0;
      ev             <= '0;
      unique case (st)
        S_IDLE: if (llc_req_valid) begin
          r         <= llc_req;
          have_meta <= 1'b0;
          rep_go    <= 1'b0;
          st        <= S_LOOKUP;
        end
        S_LOOKUP: begin
          if (tb_hit) begin
            map       <= tb_map;
            ev.tb_hit <= 1'b1;
            st        <= S_ACC_REQ;
          end else if (r.map_valid) begin
            map         <= r.map;
            ev.tb_alloc <= !r.write && tb_upd_ok;
            st          <= S_ACC_REQ;
          end else begin
            st <= S_PROBE_REQ;
          end
        end
        S_PROBE_REQ: if (dc_req_ready) st <= S_PROBE_WAIT;
        S_PROBE_WAIT: if (dc_resp_valid) begin
          map       <= '{cached: pr_hit, way: pr_way};
          meta_buf  <= meta_unpack(dc_resp_data[META_W-1:0]);
          have_meta <= 1'b1;
          ev.probe  <= 1'b1;
          st        <= S_ACC_REQ;
        end
        S_ACC_REQ: if (acc_fire) begin
          samp       <= s_sample;
          rc         <= s_rc;
          rp         <= s_rp;
          ev.dc_hit  <= map.cached;
          ev.dc_miss <= !map.cached;
          st         <= r.write ? S_POST : S_ACC_WAIT;
        end
        S_ACC_WAIT: if (map.cached ? dc_resp_valid : mm_resp_valid) begin
          llc_resp_valid <= 1'b1;
          llc_resp_data  <= map.cached ? dc_resp_data : mm_resp_data;
          st             <= S_POST;
        end
        S_POST: begin
          if (samp || (r.write && map.cached)) st <= have_meta ? S_FBR : S_META_REQ;
          else                                 st <= S_IDLE;
        end
        S_META_REQ: if (dc_req_ready) st <= S_META_WAIT;
        S_META_WAIT: if (dc_resp_valid) begin
          meta_buf  <= meta_unpack(dc_resp_data[META_W-1:0]);
          have_meta <= 1'b1;
          st        <= S_FBR;
        end
        S_FBR: begin
          meta_new      <= samp ? f_meta : meta_d;
          rep_go        <= samp && f_replace;
          rep_way       <= f_way;
          rep_evict     <= f_evict_valid;
          rep_dirty     <= f_evict_dirty;
          rep_evict_tag <= f_evict_tag;
          li            <= '0;
          ev.sampled     <= samp;
          ev.cand_insert <= samp && f_cand_insert;
          ev.halve       <= samp && f_halved;
          ev.replace     <= samp && f_replace;
          ev.repl_blocked <= samp && f_blocked;
          ev.dirty_mark  <= dirty_set;
          st <= ((samp && f_store) || dirty_set) ? S_META_WR : S_IDLE;
        end
        S_META_WR: if (dc_req_ready) begin
          if (!rep_go)        st <= S_IDLE;
          else if (rep_dirty) st <= S_WB_RD;
          else                st <= S_FILL_RD;
        end
        // ---- dirty victim: in-package -> off-package, line by line
        S_WB_RD:   if (dc_req_ready)  st <= S_WB_WAIT;
        S_WB_WAIT: if (dc_resp_valid) begin lbuf <= dc_resp_data; st <= S_WB_WR; end
        S_WB_WR:   if (mm_req_ready) begin
          li <= li + 1'b1;
          if (li == '1) begin
            ev.writeback <= 1'b1;
            st           <= S_FILL_RD;
          end else st <= S_WB_RD;
        end
        // ---- new page: off-package -> in-package
        S_FILL_RD:   if (mm_req_ready)  st <= S_FILL_WAIT;
        S_FILL_WAIT: if (mm_resp_valid) begin lbuf <= mm_resp_data; st <= S_FILL_WR; end
        S_FILL_WR:   if (dc_req_ready) begin
          li <= li + 1'b1;
          st <= (li == '1) ? S_TB_NEW : S_FILL_RD;
        end
        S_TB_NEW: st <= rep_evict ? S_TB_OLD : S_IDLE;
        S_TB_OLD: st <= S_IDLE;
        default:  st <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------------ protocol checks
  // A tag-buffer write for a replacement always finds room (two free ways were required).
  assert property (@(posedge clk) disable iff (!rst_n)
                   (st == S_TB_NEW || st == S_TB_OLD) |-> tb_upd_ok);
  // Only one DRAM is addressed at a time.
  assert property (@(posedge clk) disable iff (!rst_n) !(dc_req_valid && mm_req_valid && st != S_ACC_REQ));
  // A request is held until it is accepted.
  assert property (@(posedge clk) disable iff (!rst_n)
                   dc_req_valid && !dc_req_ready |=> dc_req_valid && $stable(dc_req));
  assert property (@(posedge clk) disable iff (!rst_n)
                   mm_req_valid && !mm_req_ready |=> mm_req_valid && $stable(mm_req));

endmodule
