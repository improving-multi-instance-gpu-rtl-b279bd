// star_lookup: hit logic of one set of the sharing-aware L3 TLB.
//
// Every way of the selected set has one VPB comparator, used for one base at
// a time: in step 1 (step_i = 0) all ways compare the request's process and
// VPB with their Base 1 in parallel; in step 2 (step_i = 1) the shared ways
// (layout not 00) compare their Base 2 on the same comparator. On a base
// match the layout picks the sub-entry: the full 4-bit index when not
// shared, the low three index bits plus the owner base in the sequential
// layout, the top three index bits plus the owner base in the stride layout.
// The located sub-entry hits when it is valid and, for a shared entry, its
// stored AIB equals the request's AIB (one 1-bit comparator per way). The
// frame (physical address space) of the hit is returned.
//
// Purely combinational; the caller sequences the steps. shared_o is high when
// some way of the set is shared: after a step-1 miss only then is step 2
// needed. The single comparator per way and the numbered steps follow the
// paper's lookup figure; matching the process identifier together with the
// VPB is this design's choice (the paper compares the VPB). Among several
// hitting ways the lowest wins, which cannot happen for a consistent set.
module star_lookup
  import star_pkg::*;
(
  input  set_t  set_i,
  input  logic  step_i,         // 0: compare Base 1, 1: compare Base 2
  input  pid_t  pid_i,
  input  vpb_t  vpb_i,
  input  sidx_t sidx_i,
  output logic  hit_o,
  output way_t  hit_way_o,
  output logic  base_hit_o,     // some base matched (sub-entry may still miss)
  output pas_t  pas_o,
  output logic  shared_o        // some way of the set is shared
);

  logic [NWAYS-1:0] hit, bm, shared;
  sidx_t            slot [NWAYS];

  always_comb begin
    for (int w = 0; w < NWAYS; w++) begin
      entry_t e;
      e         = set_i.way[w];
      shared[w] = e.layout != LAYOUT_NONE;
      // the one comparator of the way, fed by Base 1 or Base 2
      bm[w]     = (!step_i || shared[w]) && base_match(e.base[step_i], pid_i, vpb_i);
      slot[w]   = slot_of(e.layout, step_i, sidx_i);
      hit[w]    = bm[w] && e.sub[slot[w]].v &&
                  (!shared[w] || e.sub[slot[w]].aib == aib_of(e.layout, sidx_i));
    end
  end

  always_comb begin
    hit_o     = 1'b0;
    hit_way_o = '0;
    pas_o     = '0;
    for (int w = 0; w < NWAYS; w++) begin
      if (!hit_o && hit[w]) begin
        hit_o     = 1'b1;
        hit_way_o = way_t'(w);
        pas_o     = set_i.way[w].sub[slot[w]].pas;
      end
    end
    base_hit_o = |bm;
    shared_o   = |shared;
  end

endmodule
