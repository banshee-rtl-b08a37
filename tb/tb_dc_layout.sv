// tb_dc_layout -- self-checking testbench for dc_layout.
//
// For random addresses and ways, checks the address split (page number, 16-bit set, 20-bit tag),
// the DRAM-cache line address ((set * 4 + way) * 4096 + line offset), the metadata address
// (2^30 + set * 32), and the tag probe against metadata built here with the page placed in a
// random way (valid or not, dirty or not) among other pages.
module tb_dc_layout;
  import banshee_pkg::*;

  paddr_t  addr;
  way_t    way;
  logic [META_W-1:0] raw;
  ppn_t    ppn;
  dset_t   set;
  dtag_t   tag;
  dcaddr_t da, ma;
  logic    hit, dirty;
  way_t    pway;
  int checks = 0, failures = 0, n_hit = 0;

  dc_layout dut (.addr, .way, .meta_raw (raw), .ppn, .set, .tag, .data_addr (da),
                 .meta_addr (ma), .probe_hit (hit), .probe_way (pway), .probe_dirty (dirty));

  initial begin
    for (int i = 0; i < 20000; i++) begin
      longint unsigned a, p, s, t, exp_da, exp_ma;
      int pw, ev, ed;
      set_meta_t m;
      a    = {$urandom, $urandom} & 64'h0000_FFFF_FFFF_FFC0;
      addr = paddr_t'(a);
      way  = way_t'($urandom);
      p = a >> 12; s = p % 65536; t = p >> 16;
      exp_da = (s * 4 + longint'(way)) * 4096 + (a % 4096);
      exp_ma = 64'h4000_0000 + s * 32;
      // metadata: other tags everywhere, our page in way pw (maybe invalid)
      m  = '0;
      for (int w = 0; w < 4; w++)
        m.cached[w] = '{tag: dtag_t'(t ^ (w + 1)), count: 5'($urandom), v: 1'($urandom), d: 1'($urandom)};
      for (int c = 0; c < 5; c++) m.cand[c] = '{tag: dtag_t'(t), count: 5'($urandom)};
      pw = $urandom % 4; ev = $urandom % 2; ed = $urandom % 2;
      if ($urandom % 4 != 0) m.cached[pw] = '{tag: dtag_t'(t), count: 5'd3, v: 1'(ev), d: 1'(ed)};
      else ev = 0;
      raw = meta_pack(m);
      #1;
      checks++;
      if (ppn != ppn_t'(p) || set != dset_t'(s) || tag != dtag_t'(t) ||
          64'(da) != exp_da || 64'(ma) != exp_ma ||
          hit != 1'(ev) || (ev != 0 && (int'(pway) != pw || dirty != 1'(ed)))) begin
        failures++;
        if (failures < 10) $display("FAIL a=%h da=%h/%h ma=%h/%h hit=%0b/%0d", a, da, exp_da, ma, exp_ma, hit, ev);
      end
      n_hit += ev;
    end
    checks++; if (n_hit == 0) failures++;
    // the set metadata fits in its 32 bytes
    checks++; if ($bits(set_meta_t) != 233 || $bits(set_meta_t) > 256) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
