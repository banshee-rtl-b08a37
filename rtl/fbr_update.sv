// fbr_update -- one step of Banshee's bandwidth-aware frequency-based replacement (FBR).
//
// Called for a sampled access, with the 32-byte metadata of the accessed page's DRAM-cache set.
// The metadata holds four cached pages (tag, count, valid, dirty) and five candidate pages (tag,
// count). The step works as follows.
//   * The page is tracked (a valid cached entry or a candidate entry has its tag): its counter is
//     incremented. If it is a candidate and its new count exceeds the smallest cached count by
//     more than THRESHOLD, it replaces that cached page: the two entries swap places, the
//     candidate becomes a valid, clean cached page and the evicted page becomes a candidate with
//     its count kept. If the incremented counter reaches its maximum, every counter of the set is
//     halved (shift right by one). The metadata is written back.
//   * The page is not tracked: a pseudo-randomly chosen candidate entry is the victim. The page
//     takes it over, with count 1, with probability 1/count of the victim (always when the
//     victim's count is 0); the metadata is then written back.
// A replacement is only carried out when allow_replace = 1 (the tag buffer is not locked and has
// room for the two new mappings); otherwise only the counters change and repl_blocked is set.
//
// Interface and timing: purely combinational. Outputs are valid while the inputs are stable.
//
// From the paper (Algorithm 1 and Sec. 4.2.2): the counter increment, the threshold test against
// the minimum cached count, the halving on saturation, the random candidate victim replaced with
// probability 1/count, the default THRESHOLD = lines per page x sampling coefficient / 2
// (64 x 0.1 / 2 = 3.2, rounded down to 3). This design's choices: an invalid cached entry counts
// as 0 and is taken first; ties go to the lowest way; the evicted page is kept as a candidate in
// the entry the new page left; a cached hit takes precedence over a candidate with the same tag;
// "1/count" is tested as rand_prob * count < 2^16.
module fbr_update
  import banshee_pkg::*;
#(
  parameter int THRESHOLD = (LINES_PER_PAGE * 6554) / (2 * 65536)
) (
  input  set_meta_t  meta_in,
  input  dtag_t      tag,
  input  logic [$clog2(NUM_CAND)-1:0] rand_cand,
  input  logic [15:0] rand_prob,
  input  logic       allow_replace,
  output set_meta_t  meta_out,
  output logic       store,          // metadata must be written back
  output logic       hit_cached,
  output logic       hit_cand,
  output logic       replace,        // accessed page enters the DRAM cache
  output way_t       repl_way,
  output logic       evict_valid,    // a valid page leaves the DRAM cache
  output dtag_t      evict_tag,
  output logic       evict_dirty,
  output logic       halved,
  output logic       cand_insert,
  output logic       repl_blocked
);
  localparam int CW = $clog2(NUM_CAND);

  logic [WAY_W-1:0] hw;             // cached hit way
  logic [CW-1:0]    hc;             // candidate hit index
  cnt_t             cnt_old, cnt_new;
  logic [WAY_W-1:0] min_way;
  cnt_t             min_cnt;
  logic [CNT_W:0]   min_key;
  logic             want_replace;

  always_comb begin
    meta_out     = meta_in;
    store        = 1'b0;
    hit_cached   = 1'b0;
    hit_cand     = 1'b0;
    replace      = 1'b0;
    repl_way     = '0;
    evict_valid  = 1'b0;
    evict_tag    = '0;
    evict_dirty  = 1'b0;
    halved       = 1'b0;
    cand_insert  = 1'b0;
    repl_blocked = 1'b0;
    want_replace = 1'b0;
    hw           = '0;
    hc           = '0;
    cnt_old      = '0;
    cnt_new      = '0;

    // -------- look the page up (cached entries first)
    for (int c = NUM_CAND-1; c >= 0; c--)
      if (meta_in.cand[c].tag == tag) begin
        hit_cand = 1'b1;  hc = CW'(c);
      end
    for (int w = NUM_WAYS-1; w >= 0; w--)
      if (meta_in.cached[w].v && meta_in.cached[w].tag == tag) begin
        hit_cached = 1'b1;  hw = WAY_W'(w);
      end
    if (hit_cached) hit_cand = 1'b0;

    // -------- victim among the cached pages: first invalid, else the smallest count
    // key = {1, count} for a valid way, 0 for an invalid one, so invalid ways come first
    min_way = '0;
    min_key = '1;
    for (int w = NUM_WAYS-1; w >= 0; w--)
      if ((meta_in.cached[w].v ? {1'b1, meta_in.cached[w].count} : '0) <= min_key) begin
        min_way = WAY_W'(w);
        min_key = meta_in.cached[w].v ? {1'b1, meta_in.cached[w].count} : '0;
      end
    min_cnt = min_key[CNT_W] ? min_key[CNT_W-1:0] : '0;

    if (hit_cached || hit_cand) begin
      store   = 1'b1;
      cnt_old = hit_cached ? meta_in.cached[hw].count : meta_in.cand[hc].count;
      cnt_new = (cnt_old == CNT_W'(CNT_MAX)) ? cnt_old : cnt_old + 1'b1;
      if (hit_cached) meta_out.cached[hw].count = cnt_new;
      else            meta_out.cand[hc].count   = cnt_new;

      want_replace = hit_cand && (32'(cnt_new) > 32'(min_cnt) + 32'(THRESHOLD));
      if (want_replace && allow_replace) begin
        replace     = 1'b1;
        repl_way    = min_way;
        evict_valid = meta_in.cached[min_way].v;
        evict_tag   = meta_in.cached[min_way].tag;
        evict_dirty = meta_in.cached[min_way].v && meta_in.cached[min_way].d;
        meta_out.cached[min_way] = '{tag: tag, count: cnt_new, v: 1'b1, d: 1'b0};
        meta_out.cand[hc]        = '{tag: meta_in.cached[min_way].tag,
                                     count: meta_in.cached[min_way].v ?
                                            meta_in.cached[min_way].count : '0};
      end
      repl_blocked = want_replace && !allow_replace;

      // -------- counter saturation: halve every counter of the set
      if (cnt_new == CNT_W'(CNT_MAX)) begin
        halved = 1'b1;
        for (int w = 0; w < NUM_WAYS; w++) meta_out.cached[w].count = meta_out.cached[w].count >> 1;
        for (int c = 0; c < NUM_CAND; c++) meta_out.cand[c].count   = meta_out.cand[c].count >> 1;
      end
    end else begin
      // -------- untracked page: may take over a random candidate entry
      if (meta_in.cand[rand_cand].count == '0 ||
          (32'(rand_prob) * 32'(meta_in.cand[rand_cand].count)) < 32'h1_0000) begin
        cand_insert             = 1'b1;
        store                   = 1'b1;
        meta_out.cand[rand_cand] = '{tag: tag, count: CNT_W'(1)};
      end
    end
  end

endmodule
