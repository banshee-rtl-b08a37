// tb_fbr_update -- self-checking testbench for fbr_update.
//
// A reference model of the replacement step, written here in plain procedural code over integer
// arrays, is compared with the block on directed cases (threshold edge, halving on saturation,
// candidate take-over with probability 1/count, blocked replacement, invalid ways taken first)
// and on 20000 random metadata sets whose accessed tag is drawn mostly from the set's own tags.
module tb_fbr_update;
  import banshee_pkg::*;

  localparam int THR = 3;   // the block's default: 64 lines x 0.1 / 2, rounded down

  set_meta_t mi, mo;
  dtag_t     tag;
  logic [2:0] rc;
  logic [15:0] rp;
  logic allow;
  logic store, hcd, hcn, rep, ev_v, ev_d, halved, cins, blk;
  way_t rway;
  dtag_t ev_tag;
  int checks = 0, failures = 0;
  int n_rep = 0, n_halve = 0, n_ins = 0, n_blk = 0;

  fbr_update dut (
    .meta_in (mi), .tag, .rand_cand (rc), .rand_prob (rp), .allow_replace (allow),
    .meta_out (mo), .store, .hit_cached (hcd), .hit_cand (hcn), .replace (rep), .repl_way (rway),
    .evict_valid (ev_v), .evict_tag (ev_tag), .evict_dirty (ev_d), .halved, .cand_insert (cins),
    .repl_blocked (blk)
  );

  // ---------------- reference model
  typedef struct {
    int ctag[4]; int ccnt[4]; int cv[4]; int cd[4];
    int ntag[5]; int ncnt[5];
  } rm_t;
  typedef struct { rm_t m; int store, rep, rway, evv, evtag, evd, halved, ins, blk; } rres_t;

  function automatic rm_t to_rm(set_meta_t m);
    rm_t r;
    for (int w = 0; w < 4; w++) begin
      r.ctag[w] = int'(m.cached[w].tag); r.ccnt[w] = int'(m.cached[w].count);
      r.cv[w] = int'(m.cached[w].v); r.cd[w] = int'(m.cached[w].d);
    end
    for (int c = 0; c < 5; c++) begin
      r.ntag[c] = int'(m.cand[c].tag); r.ncnt[c] = int'(m.cand[c].count);
    end
    return r;
  endfunction

  function automatic rres_t ref_step(rm_t m, int t, int rcand, int rprob, int allow_r);
    rres_t o;
    int cw = -1, cc = -1, cnt, mw, mk, k;
    o = '{m: m, default: 0};
    for (int w = 0; w < 4; w++) if (cw < 0 && m.cv[w] == 1 && m.ctag[w] == t) cw = w;
    if (cw < 0) for (int c = 0; c < 5; c++) if (cc < 0 && m.ntag[c] == t) cc = c;
    // minimum: invalid ways first, then smallest count, lowest index on ties
    mw = 0; mk = 1000;
    for (int w = 0; w < 4; w++) begin
      k = m.cv[w] ? 100 + m.ccnt[w] : 0;
      if (k < mk) begin mk = k; mw = w; end
    end
    if (cw >= 0 || cc >= 0) begin
      o.store = 1;
      if (cw >= 0) begin cnt = m.ccnt[cw] < 31 ? m.ccnt[cw] + 1 : 31; o.m.ccnt[cw] = cnt; end
      else         begin cnt = m.ncnt[cc] < 31 ? m.ncnt[cc] + 1 : 31; o.m.ncnt[cc] = cnt; end
      if (cc >= 0 && cnt > (m.cv[mw] ? m.ccnt[mw] : 0) + THR) begin
        if (allow_r) begin
          o.rep = 1; o.rway = mw; o.evv = m.cv[mw]; o.evtag = m.ctag[mw];
          o.evd = m.cv[mw] & m.cd[mw];
          o.m.ctag[mw] = t; o.m.ccnt[mw] = cnt; o.m.cv[mw] = 1; o.m.cd[mw] = 0;
          o.m.ntag[cc] = m.ctag[mw]; o.m.ncnt[cc] = m.cv[mw] ? m.ccnt[mw] : 0;
        end else o.blk = 1;
      end
      if (cnt == 31) begin
        o.halved = 1;
        for (int w = 0; w < 4; w++) o.m.ccnt[w] = o.m.ccnt[w] / 2;
        for (int c = 0; c < 5; c++) o.m.ncnt[c] = o.m.ncnt[c] / 2;
      end
    end else begin
      // replace with probability 1/count: rprob/65536 < 1/count
      if (m.ncnt[rcand] == 0 || rprob * m.ncnt[rcand] < 65536) begin
        o.ins = 1; o.store = 1; o.m.ntag[rcand] = t; o.m.ncnt[rcand] = 1;
      end
    end
    return o;
  endfunction

  task automatic check_step(string what);
    rres_t e;
    rm_t   got;
    #1;
    e   = ref_step(to_rm(mi), int'(tag), int'(rc), int'(rp), int'(allow));
    got = to_rm(mo);
    checks++;
    if (got != e.m || store != e.store[0] || rep != e.rep[0] || halved != e.halved[0] ||
        cins != e.ins[0] || blk != e.blk[0] ||
        (e.rep != 0 && (int'(rway) != e.rway || ev_v != e.evv[0] || int'(ev_tag) != e.evtag ||
                        ev_d != e.evd[0]))) begin
      failures++;
      if (failures < 10) $display("FAIL %s: tag=%0h rep=%0b/%0d halved=%0b/%0d ins=%0b/%0d",
                                  what, tag, rep, e.rep, halved, e.halved, cins, e.ins);
      if (failures < 3) $display("  got %p\n  exp %p\n  in  %p rway=%0d/%0d", got, e.m, to_rm(mi), rway, e.rway);
    end
    n_rep += int'(rep); n_halve += int'(halved); n_ins += int'(cins); n_blk += int'(blk);
  endtask

  function automatic set_meta_t empty_meta();
    set_meta_t m = '0;
    return m;
  endfunction

  initial begin
    set_meta_t m;
    // ---- directed: candidate at count 3 vs empty cache (min = 0): 3+1 = 4 > 0+3 -> replace
    m = empty_meta();
    m.cand[2] = '{tag: 20'h12345, count: 5'd3};
    mi = m; tag = 20'h12345; rc = 0; rp = 0; allow = 1;
    check_step("threshold-replace");
    checks++; if (!(rep && rway == 0 && !ev_v && mo.cached[0].tag == 20'h12345 &&
                    mo.cached[0].v && mo.cached[0].count == 4)) failures++;
    // ---- threshold edge: cached min count 1, candidate 4 -> 5, 5 > 1+3 -> replace; 4 -> not
    m = empty_meta();
    for (int w = 0; w < 4; w++) m.cached[w] = '{tag: 20'(w+1), count: 5'(w+1), v: 1'b1, d: (w == 0)};
    m.cand[0] = '{tag: 20'hAAAA, count: 5'd3};
    mi = m; tag = 20'hAAAA;
    check_step("threshold-edge-no");
    checks++; if (rep) failures++;
    m.cand[0].count = 5'd4; mi = m;
    check_step("threshold-edge-yes");
    checks++; if (!(rep && rway == 0 && ev_v && ev_d && ev_tag == 20'h1 &&
                    mo.cand[0].tag == 20'h1 && mo.cand[0].count == 1)) failures++;
    allow = 0;
    check_step("blocked");
    checks++; if (rep || !blk || mo.cached[0].tag != 20'h1 || mo.cand[0].count != 5) failures++;
    allow = 1;
    // ---- halving: cached page at 30 -> 31 -> all counters halved
    m.cached[2].count = 5'd30; mi = m; tag = 20'h3;
    check_step("halve");
    checks++; if (!(halved && mo.cached[2].count == 15 && mo.cand[0].count == 2 &&
                    mo.cached[3].count == 2)) failures++;
    // ---- untracked page: victim count 4 -> needs rp*4 < 65536
    m.cand[1] = '{tag: 20'h777, count: 5'd4}; mi = m; tag = 20'hBEEF; rc = 1;
    rp = 16'd16383; check_step("insert-yes");
    checks++; if (!(cins && mo.cand[1].tag == 20'hBEEF && mo.cand[1].count == 1)) failures++;
    rp = 16'd16384; check_step("insert-no");
    checks++; if (cins || store) failures++;

    // ---- random
    for (int i = 0; i < 20000; i++) begin
      m = '0;
      for (int w = 0; w < 4; w++)
        m.cached[w] = '{tag: 20'($urandom % 16), count: 5'($urandom % 32),
                        v: 1'($urandom % 4 != 0), d: 1'($urandom)};
      for (int c = 0; c < 5; c++)
        m.cand[c] = '{tag: 20'($urandom % 16), count: 5'($urandom % 32)};
      mi    = m;
      tag   = 20'($urandom % 20);
      rc    = 3'($urandom % 5);
      rp    = 16'($urandom);
      allow = 1'($urandom % 8 != 0);
      check_step("random");
    end
    $display("events: replace=%0d halve=%0d insert=%0d blocked=%0d", n_rep, n_halve, n_ins, n_blk);
    checks++; if (n_rep == 0 || n_halve == 0 || n_ins == 0 || n_blk == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
