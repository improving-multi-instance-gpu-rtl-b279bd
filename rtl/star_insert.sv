// star_insert: insertion (fill) policy of the sharing-aware L3 TLB.
//
// Given the current contents of a set and a translation (process, VPB,
// sub-entry index, frame), computes the new contents of the set:
//   1. Base hit, entry not shared: write the sub-entry at the 4-bit index.
//   2. Base hit, entry shared: the layout gives the slot and AIB. If the slot
//      already holds this page the frame is refreshed. Else, if all 8 slots
//      of this base are in use, the entry reverts to non-shared: the other
//      base and its sub-entries are dropped, this base becomes Base 1 and its
//      sub-entries move back to their 4-bit positions, then the new
//      translation is written. Otherwise the translation is written into the
//      slot, evicting a translation of the same base with the other AIB.
//   3. Base miss, a way with no base: the first such way gets the new base.
//   4. Base miss, set full, some way eligible for sharing (star_share_select):
//      the layout follows the occupancy pattern (star_pattern_detect):
//      consecutive -> sequential (01), otherwise stride (10). The original
//      base keeps the sub-entries that already lie in its slots; each of its
//      translations lying in a slot of the new base is relocated to the slot
//      of the original base with the same 3 position bits if that slot is
//      free, or evicted. The new base becomes Base 2 and its translation is
//      written.
//   5. Otherwise the LRU way is evicted and gets the new base.
// The touched way becomes most recently used (star_lru).
//
// Purely combinational. The event outputs describe which case happened and
// are used for statistics; evict_count_o is the sub-entry utilization of an
// entry evicted by case 5. Relocation is done for all translations at once
// when an entry becomes shared, which is this design's reading of the
// paper's relocate-or-evict rule; in case 2 the paper is followed directly.
// Both bases of every way are compared at once here (the lookup path instead
// shares one comparator per way over two steps); the paper leaves the
// insertion hardware open, noting only that it is off the critical path.
module star_insert
  import star_pkg::*;
(
  input  set_t  set_i,
  input  pid_t  pid_i,
  input  vpb_t  vpb_i,
  input  sidx_t sidx_i,
  input  pas_t  pas_i,
  input  logic  dirty_i,
  output set_t  set_o,
  output way_t  way_o,            // way written
  output logic  ev_base_hit_o,    // case 1 or 2
  output logic  ev_unshare_o,     // case 2, revert to non-shared
  output logic  ev_conflict_o,    // case 2, a same-base translation overwritten
  output logic  ev_vacant_o,      // case 3
  output logic  ev_share_o,       // case 4
  output layout_e share_layout_o, // layout chosen in case 4
  output logic  ev_reloc_evict_o, // case 4, an original translation evicted
  output logic  ev_lru_evict_o,   // case 5
  output logic [$clog2(NSUB):0] evict_count_o
);

  localparam int unsigned CNT_W = $clog2(NSUB) + 1;

  logic [NWAYS-1:0]            b1_valid, shared, consec, bm1, bm2;
  logic [NWAYS-1:0][CNT_W-1:0] count;
  pid_t [NWAYS-1:0]            b1_pid;
  logic                        sh_found, sh_same_pid;
  way_t                        sh_way, victim;
  logic                        touch;
  way_t                        touch_way;
  logic [NWAYS-1:0][WAY_W-1:0] age_new;

  for (genvar w = 0; w < NWAYS; w++) begin : g_way
    logic [NSUB-1:0] vbits;
    always_comb begin
      for (int s = 0; s < NSUB; s++) vbits[s] = set_i.way[w].sub[s].v;
    end
    star_pattern_detect u_pat (
      .valid_i       (vbits),
      .consecutive_o (consec[w]),
      .count_o       (count[w])
    );
    assign b1_valid[w] = set_i.way[w].base[0].v;
    assign b1_pid[w]   = set_i.way[w].base[0].pid;
    assign shared[w]   = set_i.way[w].layout != LAYOUT_NONE;
    assign bm1[w]      = base_match(set_i.way[w].base[0], pid_i, vpb_i);
    assign bm2[w]      = shared[w] && base_match(set_i.way[w].base[1], pid_i, vpb_i);
  end

  star_share_select u_sel (
    .valid_i    (b1_valid),
    .shared_i   (shared),
    .count_i    (count),
    .pid_i      (b1_pid),
    .req_pid_i  (pid_i),
    .found_o    (sh_found),
    .same_pid_o (sh_same_pid),
    .way_o      (sh_way)
  );

  star_lru u_lru (
    .age_i       (set_i.age),
    .touch_i     (touch),
    .touch_way_i (touch_way),
    .age_o       (age_new),
    .victim_o    (victim)
  );

  set_t  set_n;
  base_t new_base;
  assign new_base = '{v: 1'b1, d: dirty_i, pid: pid_i, vpb: vpb_i};

  always_comb begin
    entry_t  e, ne;
    logic    matched, mb, have_vacant, full;
    way_t    mw, vw;
    layout_e lay;
    sidx_t   slot, t;
    logic    a;

    set_n            = set_i;
    lay              = LAYOUT_NONE;
    slot             = '0;
    t                = '0;
    a                = 1'b0;
    full             = 1'b0;
    touch            = 1'b1;
    touch_way        = '0;
    ev_base_hit_o    = 1'b0;
    ev_unshare_o     = 1'b0;
    ev_conflict_o    = 1'b0;
    ev_vacant_o      = 1'b0;
    ev_share_o       = 1'b0;
    share_layout_o   = LAYOUT_NONE;
    ev_reloc_evict_o = 1'b0;
    ev_lru_evict_o   = 1'b0;
    evict_count_o    = '0;

    matched = 1'b0;
    mb      = 1'b0;
    mw      = '0;
    for (int w = 0; w < NWAYS; w++) begin
      if (!matched && (bm1[w] || bm2[w])) begin
        matched = 1'b1;
        mw      = way_t'(w);
        mb      = !bm1[w];
      end
    end
    have_vacant = 1'b0;
    vw          = '0;
    for (int w = NWAYS-1; w >= 0; w--) begin
      if (!b1_valid[w]) begin
        have_vacant = 1'b1;
        vw          = way_t'(w);
      end
    end

    e  = set_i.way[mw];
    ne = '0;
    if (matched) begin
      // Scenario 1: the base address hits.
      ev_base_hit_o = 1'b1;
      touch_way     = mw;
      ne            = e;
      if (e.layout == LAYOUT_NONE) begin
        ne.sub[sidx_i]  = '{v: 1'b1, aib: 1'b0, pas: pas_i};
        ne.base[0].d    = e.base[0].d | dirty_i;
      end else begin
        lay  = e.layout;
        slot = slot_of(lay, mb, sidx_i);
        a    = aib_of(lay, sidx_i);
        full = 1'b1;
        for (int s = 0; s < NSUB; s++)
          if (owner_of(lay, sidx_t'(s)) == mb && !e.sub[s].v) full = 1'b0;
        if (e.sub[slot].v && e.sub[slot].aib == a) begin
          ne.sub[slot].pas = pas_i;
          ne.base[mb].d    = e.base[mb].d | dirty_i;
        end else if (full) begin
          // Shared -> non-shared: keep this base, restore 4-bit positions.
          ev_unshare_o    = 1'b1;
          ne              = '0;
          ne.base[0]      = e.base[mb];
          ne.base[0].d    = e.base[mb].d | dirty_i;
          ne.layout       = LAYOUT_NONE;
          for (int s = 0; s < NSUB; s++) begin
            if (owner_of(lay, sidx_t'(s)) == mb && e.sub[s].v)
              ne.sub[orig_idx(lay, sidx_t'(s), e.sub[s].aib)] =
                '{v: 1'b1, aib: 1'b0, pas: e.sub[s].pas};
          end
          ne.sub[sidx_i]  = '{v: 1'b1, aib: 1'b0, pas: pas_i};
        end else begin
          ev_conflict_o   = e.sub[slot].v;
          ne.sub[slot]    = '{v: 1'b1, aib: a, pas: pas_i};
          ne.base[mb].d   = e.base[mb].d | dirty_i;
        end
      end
      set_n.way[mw] = ne;
    end else if (have_vacant) begin
      // Scenario 2, a free way.
      ev_vacant_o    = 1'b1;
      touch_way      = vw;
      ne.base[0]     = new_base;
      ne.sub[sidx_i] = '{v: 1'b1, aib: 1'b0, pas: pas_i};
      set_n.way[vw]  = ne;
    end else if (sh_found) begin
      // Scenario 2, share an under-used entry with the new base.
      e              = set_i.way[sh_way];
      lay            = consec[sh_way] ? LAYOUT_SEQ : LAYOUT_STR;
      ev_share_o     = 1'b1;
      share_layout_o = lay;
      touch_way      = sh_way;
      ne.base[0]     = e.base[0];
      ne.base[1]     = new_base;
      ne.layout      = lay;
      for (int s = 0; s < NSUB; s++) begin
        if (e.sub[s].v && owner_of(lay, sidx_t'(s)) == 1'b0)
          ne.sub[s] = '{v: 1'b1, aib: aib_of(lay, sidx_t'(s)), pas: e.sub[s].pas};
      end
      for (int s = 0; s < NSUB; s++) begin
        if (e.sub[s].v && owner_of(lay, sidx_t'(s)) == 1'b1) begin
          t = slot_of(lay, 1'b0, sidx_t'(s));
          if (!ne.sub[t].v)
            ne.sub[t] = '{v: 1'b1, aib: aib_of(lay, sidx_t'(s)), pas: e.sub[s].pas};
          else
            ev_reloc_evict_o = 1'b1;
        end
      end
      ne.sub[slot_of(lay, 1'b1, sidx_i)] =
        '{v: 1'b1, aib: aib_of(lay, sidx_i), pas: pas_i};
      set_n.way[sh_way] = ne;
    end else begin
      // No entry can be shared: evict the LRU entry.
      ev_lru_evict_o    = 1'b1;
      evict_count_o     = count[victim];
      touch_way         = victim;
      ne.base[0]        = new_base;
      ne.sub[sidx_i]    = '{v: 1'b1, aib: 1'b0, pas: pas_i};
      set_n.way[victim] = ne;
    end
    way_o     = touch_way;
  end

  always_comb begin
    set_o     = set_n;
    set_o.age = age_new;
  end

endmodule
