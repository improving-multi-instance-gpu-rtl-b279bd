// tb_star_insert: randomized test of the insertion policy.
//
// star_insert is applied fill after fill to one set, its output fed back as
// the next input, as the TLB does. After each fill the whole set is compared
// with the reference model (star_ref_pkg): bases, layout, and for every slot
// its valid bit, frame and the original sub-entry index implied by its AIB;
// the LRU ages are compared with the model's order, and the reported case
// with the model's case. Streams, strides and random pages of three
// processes are mixed; every case must occur.
module tb_star_insert;
  import star_pkg::*;
  import star_ref_pkg::*;

  set_t    set_i, set_o;
  pid_t    pid;
  vpb_t    vpb;
  sidx_t   sidx;
  pas_t    pas;
  way_t    way;
  logic    ev_base_hit, ev_unshare, ev_conflict, ev_vacant, ev_share, ev_reloc, ev_lru;
  layout_e lay;
  logic [4:0] evict_count;
  int checks = 0, failures = 0;
  int cnt[string];

  star_insert dut (
    .set_i(set_i), .pid_i(pid), .vpb_i(vpb), .sidx_i(sidx), .pas_i(pas), .dirty_i(1'b0),
    .set_o(set_o), .way_o(way), .ev_base_hit_o(ev_base_hit), .ev_unshare_o(ev_unshare),
    .ev_conflict_o(ev_conflict), .ev_vacant_o(ev_vacant), .ev_share_o(ev_share),
    .share_layout_o(lay), .ev_reloc_evict_o(ev_reloc), .ev_lru_evict_o(ev_lru),
    .evict_count_o(evict_count)
  );

  star_ref m;

  task automatic compare(string ctx);
    automatic bit ok = 1;
    for (int w = 0; w < NWAYS; w++) begin
      automatic entry_t e = set_o.way[w];
      if (e.base[0].v != m.base[0][w][0].v || (e.base[0].v &&
          (e.base[0].vpb != m.base[0][w][0].vpb || e.base[0].pid != m.base[0][w][0].pid))) ok = 0;
      if (int'(e.layout) != m.layout[0][w]) ok = 0;
      if (e.layout != LAYOUT_NONE && (e.base[1].vpb != m.base[0][w][1].vpb || e.base[1].pid != m.base[0][w][1].pid)) ok = 0;
      for (int k = 0; k < NSUB; k++) begin
        if (e.sub[k].v != m.sv[0][w][k]) ok = 0;
        else if (e.sub[k].v && (e.sub[k].pas != m.spas[0][w][k] ||
                 orig_idx(e.layout, sidx_t'(k), e.sub[k].aib) != m.sorig[0][w][k])) ok = 0;
      end
      if (int'(set_o.age[w]) != m.lru[0].find_first_index(x) with (x == w)[0]) ok = 0;
    end
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL set contents after %s", ctx);
    end
  endtask

  initial begin
    int sptr = 0;
    m = new();
    set_i = '0;
    for (int w = 0; w < NWAYS; w++) set_i.age[w] = WAY_W'(w);
    for (int n = 0; n < 6000; n++) begin
      automatic int p = $urandom % 3, mode = (n / 500) % 4, b, s;
      string got;
      logic [56:0] va;
      case (mode)
        0: begin b = (sptr / 16) % 12; s = sptr % 16; sptr += ($urandom % 3 == 0) ? 2 : 1; end
        3: begin p = 0; b = 20 + (sptr / 16) % 3; s = sptr % 16; sptr++; end
        1: begin b = $urandom % 16; s = ($urandom % 4) * 4 + $urandom % 2; end
        default: begin b = $urandom % 10; s = $urandom % 16; end
      endcase
      va = {30'(p * 32 + b), 7'd0, 4'(s), 16'h0};
      pid = 3'(p); vpb = va[56:27]; sidx = va[19:16]; pas = 52'({$urandom, $urandom});
      #1;
      m.insert(va, 3'(p), pas);
      got = ev_unshare ? "unshare" : ev_conflict ? "conflict" : ev_base_hit ? "base_hit" :
            ev_vacant ? "vacant" : (ev_share && lay == LAYOUT_SEQ) ? "share_seq" :
            (ev_share && lay == LAYOUT_STR) ? "share_str" : ev_lru ? "lru_evict" : "none";
      checks++;
      if (got != m.last_case) begin
        failures++;
        if (failures < 10) $display("FAIL case %s expected %s", got, m.last_case);
      end
      cnt[got]++;
      if (ev_reloc) cnt["reloc_evict"]++;
      compare(got);
      set_i = set_o;
      #1;
    end
    foreach (cnt[k]) $display("%s: %0d", k, cnt[k]);
    checks++;
    if (!(cnt.exists("unshare") && cnt.exists("conflict") && cnt.exists("base_hit") && cnt.exists("vacant") &&
          cnt.exists("share_seq") && cnt.exists("share_str") && cnt.exists("lru_evict") && cnt.exists("reloc_evict"))) begin
      failures++;
      $display("FAIL not every insertion case occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
