// star_ref_pkg: transaction-level reference model of the sharing-aware L3
// TLB, used by the testbenches to predict hits, frames, lookup latency and
// the insertion events.
//
// The model is written from the algorithm description, not from the RTL: an
// entry keeps, per slot, the original 4-bit sub-entry index of the
// translation it holds, and a lookup searches the slots of the matching base
// for that index instead of computing a slot address. LRU is kept as an
// ordered list of ways per set (front = most recently used).
package star_ref_pkg;

  localparam int NS = 128;
  localparam int NW = 8;
  localparam int NSB = 16;

  typedef struct {
    bit          v;
    bit [2:0]    pid;
    bit [29:0]   vpb;
  } rbase_t;

  class star_ref;
    rbase_t    base   [NS][NW][2];
    int        layout [NS][NW];        // 0 none, 1 sequential, 2 stride
    bit        sv     [NS][NW][NSB];
    bit [3:0]  sorig  [NS][NW][NSB];   // original sub-entry index held
    bit [51:0] spas   [NS][NW][NSB];
    int        lru    [NS][$];

    // insertion statistics
    int n_base_hit, n_unshare, n_conflict, n_vacant, n_share_seq,
        n_share_str, n_reloc_evict, n_lru_evict;
    string last_case;

    function new();
      for (int s = 0; s < NS; s++) begin
        lru[s] = {};
        for (int w = 0; w < NW; w++) begin
          lru[s].push_back(w);
          clear_entry(s, w);
        end
      end
    endfunction

    function void clear_entry(int s, int w);
      base[s][w][0] = '{0, 0, 0};
      base[s][w][1] = '{0, 0, 0};
      layout[s][w]  = 0;
      for (int k = 0; k < NSB; k++) begin
        sv[s][w][k] = 0; sorig[s][w][k] = 0; spas[s][w][k] = 0;
      end
    endfunction

    static function int set_of(bit [56:0] va);  return int'(va[26:20]); endfunction
    static function bit [3:0] sub_of(bit [56:0] va); return va[19:16]; endfunction
    static function bit [29:0] vpb_of(bit [56:0] va); return va[56:27]; endfunction

    // Does slot k belong to base b of an entry with this layout?
    static function bit owns(int lay, int b, int k);
      if (lay == 0) return b == 0;
      if (lay == 1) return (k / 8) == b;
      return (k % 2) == b;
    endfunction

    // Slot base b uses for sub-entry index i.
    static function int home(int lay, int b, int i);
      if (lay == 0) return i;
      if (lay == 1) return b * 8 + (i % 8);
      return (i / 2) * 2 + b;
    endfunction

    function bit bmatch(int s, int w, int b, bit [2:0] pid, bit [29:0] vpb);
      if (b == 1 && layout[s][w] == 0) return 0;
      return base[s][w][b].v && base[s][w][b].pid == pid && base[s][w][b].vpb == vpb;
    endfunction

    function int count(int s, int w);
      int c = 0;
      for (int k = 0; k < NSB; k++) c += sv[s][w][k];
      return c;
    endfunction

    function void touch(int s, int w);
      foreach (lru[s][i]) if (lru[s][i] == w) begin lru[s].delete(i); break; end
      lru[s].push_front(w);
    endfunction

    // Lookup: returns hit, frame and whether the Base 2 step was needed.
    function void lookup(bit [56:0] va, bit [2:0] pid, output bit hit,
                         output bit [51:0] pas, output bit second);
      int s = set_of(va);
      bit any_shared = 0, hit1 = 0;
      int hw = -1;
      hit = 0; pas = 0;
      for (int b = 0; b < 2; b++)
        for (int w = 0; w < NW; w++) begin
          if (layout[s][w] != 0) any_shared = 1;
          if (!hit && bmatch(s, w, b, pid, vpb_of(va)))
            for (int k = 0; k < NSB; k++)
              if (!hit && owns(layout[s][w], b, k) && sv[s][w][k] && sorig[s][w][k] == sub_of(va)) begin
                hit = 1; pas = spas[s][w][k]; hw = w;
                if (b == 0) hit1 = 1;
              end
        end
      second = !hit1 && any_shared;
      if (hit) touch(s, hw);
    endfunction

    function void put(int s, int w, int k, bit [3:0] orig, bit [51:0] p);
      sv[s][w][k] = 1; sorig[s][w][k] = orig; spas[s][w][k] = p;
    endfunction

    function void insert(bit [56:0] va, bit [2:0] pid, bit [51:0] p);
      int s = set_of(va);
      bit [3:0] i = sub_of(va);
      bit [29:0] vpb = vpb_of(va);
      int mw = -1, mb = 0, vw = -1, sw = -1, best = 99;
      bit pid_pref = 0;
      for (int w = 0; w < NW && mw < 0; w++)
        for (int b = 0; b < 2 && mw < 0; b++)
          if (bmatch(s, w, b, pid, vpb)) begin mw = w; mb = b; end
      if (mw >= 0) begin
        int lay = layout[s][mw];
        int k = home(lay, mb, i);
        n_base_hit++;
        last_case = "base_hit";
        if (lay == 0) put(s, mw, i, i, p);
        else if (sv[s][mw][k] && sorig[s][mw][k] == i) spas[s][mw][k] = p;
        else begin
          bit full = 1;
          for (int q = 0; q < NSB; q++) if (owns(lay, mb, q) && !sv[s][mw][q]) full = 0;
          if (full) begin
            bit [3:0]  o[$];
            bit [51:0] pp[$];
            rbase_t keep = base[s][mw][mb];
            for (int q = 0; q < NSB; q++)
              if (owns(lay, mb, q) && sv[s][mw][q]) begin o.push_back(sorig[s][mw][q]); pp.push_back(spas[s][mw][q]); end
            clear_entry(s, mw);
            base[s][mw][0] = keep;
            foreach (o[n]) put(s, mw, o[n], o[n], pp[n]);
            put(s, mw, i, i, p);
            n_unshare++;
            last_case = "unshare";
          end else begin
            if (sv[s][mw][k]) begin n_conflict++; last_case = "conflict"; end
            put(s, mw, k, i, p);
          end
        end
        touch(s, mw);
        return;
      end
      for (int w = 0; w < NW; w++) if (vw < 0 && !base[s][w][0].v) vw = w;
      if (vw >= 0) begin
        clear_entry(s, vw);
        base[s][vw][0] = '{1, pid, vpb};
        put(s, vw, i, i, p);
        touch(s, vw);
        n_vacant++;
        last_case = "vacant";
        return;
      end
      // sharing candidates
      for (int w = 0; w < NW; w++)
        if (layout[s][w] == 0 && count(s, w) < 8 && base[s][w][0].pid == pid) pid_pref = 1;
      for (int w = 0; w < NW; w++)
        if (layout[s][w] == 0 && count(s, w) < 8 && (!pid_pref || base[s][w][0].pid == pid))
          if (count(s, w) < best) begin best = count(s, w); sw = w; end
      if (sw >= 0) begin
        int first = -1, last = -1, lay;
        bit gap = 0;
        bit [3:0]  o[$];
        bit [51:0] pp[$];
        for (int k = 0; k < NSB; k++) if (sv[s][sw][k]) begin if (first < 0) first = k; last = k; end
        for (int k = first; k <= last && first >= 0; k++) if (!sv[s][sw][k]) gap = 1;
        lay = gap ? 2 : 1;
        for (int k = 0; k < NSB; k++) if (sv[s][sw][k]) begin o.push_back(sorig[s][sw][k]); pp.push_back(spas[s][sw][k]); end
        for (int k = 0; k < NSB; k++) sv[s][sw][k] = 0;
        layout[s][sw] = lay;
        base[s][sw][1] = '{1, pid, vpb};
        // translations already in a slot of the original base stay
        foreach (o[n]) if (home(lay, 0, o[n]) == int'(o[n])) put(s, sw, o[n], o[n], pp[n]);
        foreach (o[n]) if (home(lay, 0, o[n]) != int'(o[n])) begin
          int h = home(lay, 0, o[n]);
          if (!sv[s][sw][h]) put(s, sw, h, o[n], pp[n]);
          else n_reloc_evict++;
        end
        put(s, sw, home(lay, 1, i), i, p);
        if (lay == 1) begin n_share_seq++; last_case = "share_seq"; end
        else          begin n_share_str++; last_case = "share_str"; end
        touch(s, sw);
        return;
      end
      begin
        int v = lru[s][$];
        clear_entry(s, v);
        base[s][v][0] = '{1, pid, vpb};
        put(s, v, i, i, p);
        touch(s, v);
        n_lru_evict++;
        last_case = "lru_evict";
      end
    endfunction
  endclass

endpackage
