// tb_banshee_mc -- end-to-end testbench of the Banshee memory controller at its default size.
//
// The controller (1024-entry 8-way tag buffer, 10% sampling coefficient, threshold 3) is
// connected to two behavioural DRAMs: the DRAM cache, which starts zeroed, and main memory,
// whose lines start with a pattern derived from their address. The testbench plays the rest of
// the system:
//   * the LLC, sending 64 B reads (LLC misses, carrying the page's mapping from the page table)
//     and 64 B writes (dirty evictions, carrying no mapping);
//   * the page table and TLBs, a table of (cached, way) per page, stale until software updates it;
//   * the software flush routine: on irq it locks the tag buffer, lets more traffic through,
//     reads every entry, copies remap = 1 entries into the page table, clears the remap bits and
//     unlocks.
// Traffic comes from 128 groups of 7 pages (one group per tag-buffer set, all pages of a group in
// one DRAM-cache set), with a hot subset that drifts over time so pages enter and leave the
// cache, mixed with one-off accesses to cold pages and long runs on one page.
// Checks: every read returns the last data written to that address (a golden copy kept here);
// each read answers DRAM latency + 3 cycles after it was accepted, for DRAM-cache hits and
// misses alike; a request that is not sampled moves exactly 64 B to or from one DRAM and no
// metadata; a replacement moves the metadata (32 B read, 32 B write) plus one page each way
// (and the victim page again when it is dirty). Every mechanism must occur at least once:
// tag-buffer hit, remap = 0 allocation, tag probe, DRAM-cache hit and miss, sampling, candidate
// insertion, replacement, dirty write-back, counter halving, dirty-bit update, a replacement
// blocked while locked or for lack of room, and a full tag-buffer flush.
module tb_banshee_mc;
  import banshee_pkg::*;

  localparam int DLAT = 4;
  localparam int MAX_REQS = 2000000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       llc_req_valid = 0, llc_req_ready, llc_resp_valid;
  llc_req_t   llc_req;
  line_t      llc_resp_data;
  logic       dc_req_valid, dc_req_ready, dc_resp_valid;
  dram_req_t  dc_req;
  line_t      dc_resp_data;
  logic       mm_req_valid, mm_req_ready, mm_resp_valid;
  dram_req_t  mm_req;
  line_t      mm_resp_data;
  logic [9:0] sw_rd_idx = '0;
  logic       sw_rd_valid, sw_rd_remap, sw_lock = 0, sw_clear_remap = 0, irq;
  ppn_t       sw_rd_page;
  mapping_t   sw_rd_map;
  logic [10:0] remap_count;
  mc_events_t ev;

  banshee_mc dut (
    .clk, .rst_n,
    .llc_req_valid, .llc_req_ready, .llc_req, .llc_resp_valid, .llc_resp_data,
    .dc_req_valid, .dc_req_ready, .dc_req, .dc_resp_valid, .dc_resp_data,
    .mm_req_valid, .mm_req_ready, .mm_req, .mm_resp_valid, .mm_resp_data,
    .sw_rd_idx, .sw_rd_valid, .sw_rd_page, .sw_rd_map, .sw_rd_remap,
    .sw_lock, .sw_clear_remap, .tb_remap_count (remap_count), .irq, .ev
  );

  dram_model #(.LATENCY(DLAT), .PATTERN(1'b0)) u_dc (
    .clk, .req_valid (dc_req_valid), .req_ready (dc_req_ready), .req (dc_req),
    .resp_valid (dc_resp_valid), .resp_data (dc_resp_data));
  dram_model #(.LATENCY(DLAT), .SALT(64'h5A5A_0000_0000_0000)) u_mm (
    .clk, .req_valid (mm_req_valid), .req_ready (mm_req_ready), .req (mm_req),
    .resp_valid (mm_resp_valid), .resp_data (mm_resp_data));

  // ------------------------------------------------------------------ system models
  line_t    gold [paddr_t];        // latest data of every line written
  mapping_t ptab [ppn_t];          // page table / TLB contents (absent = not cached)
  int checks = 0, failures = 0;

  function automatic line_t mm_init(paddr_t a);
    line_t l;
    for (int i = 0; i < 8; i++) l[i*64 +: 64] = {16'(i), a} ^ 64'h5A5A_0000_0000_0000;
    return l;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ------------------------------------------------------------------ event accounting
  typedef enum int {E_TBHIT, E_ALLOC, E_PROBE, E_DCHIT, E_DCMISS, E_SAMPLED, E_INSERT,
                    E_REPLACE, E_WB, E_HALVE, E_BLOCKED, E_DIRTY, E_FLUSH, E_NUM} evn_t;
  int  ev_total [E_NUM];
  bit  ev_req   [E_NUM];   // events of the current request
  always @(posedge clk) if (rst_n) begin
    bit f [E_NUM];
    f[E_TBHIT] = ev.tb_hit;   f[E_ALLOC] = ev.tb_alloc;   f[E_PROBE] = ev.probe;
    f[E_DCHIT] = ev.dc_hit;   f[E_DCMISS] = ev.dc_miss;   f[E_SAMPLED] = ev.sampled;
    f[E_INSERT] = ev.cand_insert; f[E_REPLACE] = ev.replace; f[E_WB] = ev.writeback;
    f[E_HALVE] = ev.halve;    f[E_BLOCKED] = ev.repl_blocked; f[E_DIRTY] = ev.dirty_mark;
    f[E_FLUSH] = 1'b0;
    for (int i = 0; i < E_NUM; i++) if (f[i]) begin ev_total[i]++; ev_req[i] = 1; end
  end

  // ------------------------------------------------------------------ one LLC request
  int n_lat_hit = 0, n_lat_miss = 0;
  task automatic do_req(paddr_t a, bit wr);
    longint unsigned dc0, mm0, dcb, mmb;
    int lat;
    line_t wd, exp;
    ppn_t p = pa_ppn(a);
    for (int i = 0; i < 16; i++) wd[i*32 +: 32] = $urandom;
    for (int i = 0; i < E_NUM; i++) ev_req[i] = 0;
    dc0 = u_dc.rd_bytes + u_dc.wr_bytes;
    mm0 = u_mm.rd_bytes + u_mm.wr_bytes;
    @(negedge clk);
    llc_req.addr      = a;
    llc_req.write     = wr;
    llc_req.map_valid = !wr;
    llc_req.map       = (!wr && ptab.exists(p)) ? ptab[p] : '0;
    llc_req.wdata     = wr ? wd : '0;
    llc_req_valid     = 1;
    @(posedge clk);
    while (!llc_req_ready) @(posedge clk);
    #1 llc_req_valid = 0;
    if (wr) gold[a] = wd;
    else begin
      lat = 0;
      do begin @(posedge clk); lat++; end while (!llc_resp_valid);
      exp = gold.exists(a) ? gold[a] : mm_init(a);
      check(llc_resp_data == exp, $sformatf("read data %h", a));
      check(lat == DLAT + 3, $sformatf("read latency %0d", lat));
    end
    // wait until the controller is idle again
    @(posedge clk);
    while (!llc_req_ready) @(posedge clk);
    #1;
    if (ev_req[E_DCHIT]) n_lat_hit++; else n_lat_miss++;
    dcb = u_dc.rd_bytes + u_dc.wr_bytes - dc0;
    mmb = u_mm.rd_bytes + u_mm.wr_bytes - mm0;
    check(ev_req[E_DCHIT] ^ ev_req[E_DCMISS], "exactly one data access");
    if (!ev_req[E_SAMPLED] && !(wr && ev_req[E_DCHIT])) begin
      // Unsampled: 64 B to one DRAM, plus a 32 B tag probe for an unknown dirty eviction
      check(dcb == (ev_req[E_DCHIT] ? 64 : 0) + (ev_req[E_PROBE] ? 32 : 0) &&
            mmb == (ev_req[E_DCHIT] ? 0 : 64),
            $sformatf("unsampled traffic dc=%0d mm=%0d", dcb, mmb));
    end
    if (!ev_req[E_SAMPLED] && wr && ev_req[E_DCHIT]) begin
      // Unsampled dirty eviction into the DRAM cache: data, metadata read, D-bit write if new
      check(dcb == 64 + 32 + (ev_req[E_DIRTY] ? 32 : 0) && mmb == 0,
            $sformatf("dirty-hit traffic dc=%0d mm=%0d", dcb, mmb));
    end
    if (ev_req[E_REPLACE]) begin
      longint unsigned edc, emm;
      edc = (ev_req[E_DCHIT] ? 64 : 0) + (ev_req[E_PROBE] ? 32 : 32) + 32 + 4096 +
            (ev_req[E_WB] ? 4096 : 0);
      emm = (ev_req[E_DCHIT] ? 0 : 64) + 4096 + (ev_req[E_WB] ? 4096 : 0);
      check(dcb == edc && mmb == emm,
            $sformatf("replacement traffic dc=%0d/%0d mm=%0d/%0d", dcb, edc, mmb, emm));
    end
  endtask

  // ------------------------------------------------------------------ software flush
  int n_flush = 0;
  int in_flush = 0;
  task automatic flush_routine();
    int n_remap = 0;
    in_flush = 1;
    @(negedge clk) sw_lock = 1;
    // traffic continues while the routine runs; replacements must not happen
    for (int i = 0; i < 200; i++) begin
      int g = $urandom % 128, k = $urandom % 7;
      do_req({20'(k + 1), 16'(g), 6'($urandom), 6'b0}, 1'b0);
      check(!ev_req[E_REPLACE], "no replacement while locked");
    end
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk) sw_rd_idx = 10'(i);
      #1;
      if (sw_rd_valid && sw_rd_remap) begin
        ptab[sw_rd_page] = sw_rd_map;
        n_remap++;
      end
    end
    check(n_remap == int'(remap_count) && n_remap >= 717, $sformatf("flush read %0d entries", n_remap));
    @(negedge clk) sw_clear_remap = 1;
    @(negedge clk) sw_clear_remap = 0; sw_lock = 0;
    check(remap_count == 0 && !irq, "remap bits cleared");
    n_flush++;
    ev_total[E_FLUSH]++;
    in_flush = 0;
  endtask

  // ------------------------------------------------------------------ stimulus
  function automatic paddr_t hot_addr(int g, int k);
    return {20'(k + 1), 16'(g), 6'($urandom), 6'b0};
  endfunction

  initial begin
    int nreq = 0, round = 0;
    bit all_seen;
    llc_req = '0;
    for (int i = 0; i < E_NUM; i++) ev_total[i] = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    while (nreq < MAX_REQS) begin
      // one round: every group gets a burst of accesses to its current hot pages
      for (int g = 0; g < 128; g++) begin
        for (int i = 0; i < 8; i++) begin
          int k;
          k = (round / 2 + $urandom % 4) % 7;         // hot subset drifts every 2 rounds
          do_req(hot_addr(g, k), ($urandom % 4) == 0);
          // a cold page, touched once
          do_req({$urandom, 16'h8000 | 16'($urandom), 12'($urandom) & 12'hFC0}, ($urandom % 8) == 0);
          nreq += 2;
          if (irq && !in_flush) flush_routine();
        end
      end
      // a long run on one page drives its counter to saturation
      if (round % 8 == 3)
        for (int i = 0; i < 600; i++) begin
          do_req(hot_addr(5, 0), 1'b0);
          do_req({$urandom, 16'h8000 | 16'($urandom), 6'($urandom), 6'b0}, 1'b0);
          nreq += 2;
        end
      round++;
      all_seen = 1;
      for (int i = 0; i < E_NUM; i++) if (ev_total[i] == 0) all_seen = 0;
      if (all_seen && round >= 8) break;
    end

    $display("requests=%0d rounds=%0d cycles-checked reads hit=%0d miss=%0d", nreq, round,
             n_lat_hit, n_lat_miss);
    $display("events: tb_hit=%0d alloc=%0d probe=%0d dc_hit=%0d dc_miss=%0d sampled=%0d",
             ev_total[E_TBHIT], ev_total[E_ALLOC], ev_total[E_PROBE], ev_total[E_DCHIT],
             ev_total[E_DCMISS], ev_total[E_SAMPLED]);
    $display("events: insert=%0d replace=%0d writeback=%0d halve=%0d blocked=%0d dirty=%0d flush=%0d",
             ev_total[E_INSERT], ev_total[E_REPLACE], ev_total[E_WB], ev_total[E_HALVE],
             ev_total[E_BLOCKED], ev_total[E_DIRTY], ev_total[E_FLUSH]);
    $display("traffic: dram-cache %0d B, main memory %0d B",
             u_dc.rd_bytes + u_dc.wr_bytes, u_mm.rd_bytes + u_mm.wr_bytes);
    for (int i = 0; i < E_NUM; i++) begin
      evn_t e;
      e = evn_t'(i);
      check(ev_total[i] > 0, $sformatf("mechanism %s never happened", e.name()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
