// tb_tag_buffer -- self-checking testbench for tag_buffer (1024 entries, 8 ways, 70%).
//
// Directed checks of: lookup after remap = 0 and remap = 1 writes; a remap = 0 write not
// overwriting a known page; the masked LRU victim (oldest remap = 0 entry, a lookup making a
// way most recent); refusal when a set holds only remap = 1 entries; the free-way count; the
// remap counter and the interrupt at ceil(0.7 * 1024) = 717 remap entries; the software read
// port; and clearing the remap bits while keeping the mappings.
module tb_tag_buffer;
  import banshee_pkg::*;

  localparam int ENTRIES = 1024, WAYS = 8, SETS = ENTRIES / WAYS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ppn_t     lk_page, upd_page, sw_page;
  logic     lk_touch = 0, lk_hit, lk_remap, upd_valid = 0, upd_remap = 0, upd_ok;
  mapping_t lk_map, upd_map, sw_map;
  logic [3:0] lk_free;
  logic [9:0] sw_idx = '0;
  logic     sw_valid, sw_remap, sw_clear = 0, irq;
  logic [10:0] rcount;

  int checks = 0, failures = 0;

  tag_buffer dut (
    .clk, .rst_n, .lk_page, .lk_touch, .lk_hit, .lk_map, .lk_remap, .lk_free,
    .upd_valid, .upd_page, .upd_map, .upd_remap, .upd_ok,
    .sw_rd_idx (sw_idx), .sw_rd_valid (sw_valid), .sw_rd_page (sw_page), .sw_rd_map (sw_map),
    .sw_rd_remap (sw_remap), .sw_clear_remap (sw_clear), .remap_count (rcount), .irq
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // page number in TB set s with tag t
  function automatic ppn_t pg(int s, int t);
    return ppn_t'(t * SETS + s);
  endfunction

  task automatic write(ppn_t p, bit cached, int way, bit remap, output bit ok);
    @(negedge clk);
    upd_page = p; upd_map = '{cached: cached, way: way_t'(way)}; upd_remap = remap;
    upd_valid = 1; #1; ok = upd_ok;
    @(posedge clk); #1 upd_valid = 0;
  endtask

  task automatic look(ppn_t p, bit touch = 0);
    @(negedge clk);
    lk_page = p; lk_touch = touch; #1;
    if (touch) begin @(posedge clk); #1 lk_touch = 0; end
  endtask

  initial begin
    bit ok;
    int n, found;
    lk_page = '0; upd_page = '0; upd_map = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- empty
    look(pg(5, 1));
    check(!lk_hit && lk_free == 8 && rcount == 0 && !irq, "empty buffer");

    // ---- remap = 0 allocation, then a remap = 1 update of the same page
    write(pg(5, 1), 1, 2, 0, ok);
    look(pg(5, 1));
    check(ok && lk_hit && lk_map.cached && lk_map.way == 2 && !lk_remap && rcount == 0,
          "remap=0 entry");
    write(pg(5, 1), 0, 0, 1, ok);
    look(pg(5, 1));
    check(lk_hit && !lk_map.cached && lk_remap && rcount == 1 && lk_free == 7, "remap=1 update");
    // a remap = 0 write (stale mapping from a request) must not overwrite it
    write(pg(5, 1), 1, 3, 0, ok);
    look(pg(5, 1));
    check(lk_hit && !lk_map.cached && lk_remap && rcount == 1, "remap=0 write ignored");
    // writing the same page with remap = 1 again does not count twice
    write(pg(5, 1), 1, 1, 1, ok);
    look(pg(5, 1));
    check(lk_hit && lk_map.cached && lk_map.way == 1 && rcount == 1, "remap rewrite");

    // ---- masked LRU: set 9, fill with 8 remap = 0 pages (tags 1..8), touch tag 1,
    // make tag 2 a remap entry; the next allocation must evict tag 3.
    for (int t = 1; t <= 8; t++) write(pg(9, t), 0, 0, 0, ok);
    look(pg(9, 1), 1);
    write(pg(9, 2), 1, 0, 1, ok);
    write(pg(9, 20), 0, 0, 0, ok);
    look(pg(9, 3));  check(!lk_hit, "LRU victim evicted");
    look(pg(9, 1));  check(lk_hit, "recently used entry kept");
    look(pg(9, 2));  check(lk_hit && lk_remap, "remap entry kept");
    look(pg(9, 20)); check(lk_hit && !lk_remap, "new entry present");
    look(pg(9, 4));  check(lk_hit, "second-oldest kept");

    // ---- a set full of remap entries refuses a new page
    for (int t = 1; t <= 8; t++) write(pg(11, t), 1, t % 4, 1, ok);
    look(pg(11, 1));
    check(lk_free == 0, "no free way");
    write(pg(11, 9), 1, 0, 0, ok);
    check(!ok, "write refused in full set");
    look(pg(11, 9)); check(!lk_hit, "refused page absent");
    check(rcount == 1 + 1 + 8, "remap count");

    // ---- interrupt at 717 remap entries: fill sets 20 and up
    n = rcount;
    for (int s = 20; s < SETS && n < 716; s++)
      for (int t = 1; t <= 8 && n < 716; t++) begin
        write(pg(s, t), 1, 0, 1, ok);
        n++;
      end
    look(pg(0, 0));
    check(rcount == 716 && !irq, "716 remap entries, no irq");
    write(pg(12, 1), 1, 0, 1, ok);
    @(negedge clk);
    check(rcount == 717 && irq, "irq at 717");

    // ---- software read port: find page pg(5,1) at index 5*8 + way
    found = 0;
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); sw_idx = 10'(5 * WAYS + i); #1;
      if (sw_valid && sw_page == pg(5, 1) && sw_remap && sw_map.cached && sw_map.way == 1) found++;
    end
    check(found == 1, "software read of entry");

    // ---- clear the remap bits
    @(negedge clk); sw_clear = 1; @(posedge clk); #1 sw_clear = 0;
    look(pg(5, 1));
    check(rcount == 0 && !irq && lk_hit && !lk_remap && lk_map.cached && lk_map.way == 1,
          "clear keeps the mappings");
    look(pg(11, 1));
    check(lk_free == 8, "set free after clear");
    write(pg(11, 9), 1, 0, 0, ok);
    check(ok, "allocation possible after clear");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
