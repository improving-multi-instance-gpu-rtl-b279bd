// star_l3_tlb: the sub-entry sharing-aware L3 TLB.
//
// 1024 entries as NSETS (128) sets of NWAYS (8) ways, each entry with 16
// sub-entries that may be shared by two base addresses (see star_pkg). The
// sets are held in a single-ported array that is read and written one whole
// set at a time, so that it maps onto an SRAM macro; the set holds the LRU
// ages as well.
//
// Operation, one request at a time:
//   lookup: the set is read; in a first cycle star_lookup compares Base 1 of
//           every way. If nothing hit and some entry of the set is shared,
//           a second cycle compares Base 2 on the same per-way comparators.
//           A hit makes its way most recently used (set written back). The
//           response appears LOOKUP_LAT cycles after the request handshake,
//           or 2*LOOKUP_LAT when the Base 2 step was needed, the paper's
//           accounting of the sequential check (the internal evaluation
//           takes one or two cycles of that time).
//   fill:   the set is read, star_insert computes its new contents, which are
//           written back; fill_done_o pulses. The paper notes that insertion
//           is off the critical path; here a fill takes three cycles.
// Fills are accepted before lookups when both are offered.
//
// Interface: valid/ready handshakes on lk_* (lookup request), rsp_* (lookup
// response, held until rsp_ready_i) and fill_*. A response carries the
// request's tag, process and address back so that a miss can be forwarded to
// the page table walker. ev_o gives one-cycle event pulses for statistics.
// After reset the array is cleared, one set per cycle (NSETS cycles), before
// the first request is taken.
module star_l3_tlb
  import star_pkg::*;
#(
  parameter int unsigned LOOKUP_LAT = 40,  // cycles, Table I
  parameter int unsigned TAG_W      = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // lookup request
  input  logic              lk_valid_i,
  output logic              lk_ready_o,
  input  logic [VA_W-1:0]   lk_va_i,
  input  pid_t              lk_pid_i,
  input  logic [TAG_W-1:0]  lk_tag_i,
  // lookup response
  output logic              rsp_valid_o,
  input  logic              rsp_ready_i,
  output logic              rsp_hit_o,
  output logic [PA_W-1:0]   rsp_pa_o,
  output logic [VA_W-1:0]   rsp_va_o,
  output pid_t              rsp_pid_o,
  output logic [TAG_W-1:0]  rsp_tag_o,
  // fill (translation insertion)
  input  logic              fill_valid_i,
  output logic              fill_ready_o,
  input  logic [VA_W-1:0]   fill_va_i,
  input  pid_t              fill_pid_i,
  input  pas_t              fill_pas_i,
  input  logic              fill_dirty_i,
  output logic              fill_done_o,
  // statistics
  output tlb_ev_t           ev_o
);

  initial assert (LOOKUP_LAT >= 3) else $error("LOOKUP_LAT must be at least 3");

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_READ, S_EVAL, S_WAIT, S_RESP} state_e;

  state_e             state;
  logic               op_fill;
  logic [VA_W-1:0]    va_q;
  pid_t               pid_q;
  pas_t               pas_q;
  logic               dirty_q;
  logic [TAG_W-1:0]   tag_q;
  logic [SET_W-1:0]   init_idx;
  logic [$clog2(2*LOOKUP_LAT+1)-1:0] cnt, target;
  set_t               rd_q;
  set_t               mem [NSETS];

  // Lookup datapath
  logic  lk_hit, lk_base_hit, lk_shared, step_q;
  way_t  lk_way;
  pas_t  lk_pas;
  logic [NWAYS-1:0][WAY_W-1:0] lk_age;
  way_t  unused_victim;

  star_lookup u_lookup (
    .set_i         (rd_q),
    .step_i        (step_q),
    .pid_i         (pid_q),
    .vpb_i         (va_vpb(va_q)),
    .sidx_i        (va_sidx(va_q)),
    .hit_o         (lk_hit),
    .hit_way_o     (lk_way),
    .base_hit_o    (lk_base_hit),
    .pas_o         (lk_pas),
    .shared_o      (lk_shared)
  );

  star_lru u_lru (
    .age_i       (rd_q.age),
    .touch_i     (lk_hit),
    .touch_way_i (lk_way),
    .age_o       (lk_age),
    .victim_o    (unused_victim)
  );

  // Fill datapath
  set_t    ins_set;
  way_t    ins_way;
  tlb_ev_t ins_ev;
  layout_e ins_layout;
  logic    ins_share;

  star_insert u_insert (
    .set_i            (rd_q),
    .pid_i            (pid_q),
    .vpb_i            (va_vpb(va_q)),
    .sidx_i           (va_sidx(va_q)),
    .pas_i            (pas_q),
    .dirty_i          (dirty_q),
    .set_o            (ins_set),
    .way_o            (ins_way),
    .ev_base_hit_o    (ins_ev.base_hit),
    .ev_unshare_o     (ins_ev.unshare),
    .ev_conflict_o    (ins_ev.conflict),
    .ev_vacant_o      (ins_ev.vacant),
    .ev_share_o       (ins_share),
    .share_layout_o   (ins_layout),
    .ev_reloc_evict_o (ins_ev.reloc_evict),
    .ev_lru_evict_o   (ins_ev.lru_evict),
    .evict_count_o    (ins_ev.evict_count)
  );
  assign ins_ev.share_seq   = ins_share && ins_layout == LAYOUT_SEQ;
  assign ins_ev.share_str   = ins_share && ins_layout == LAYOUT_STR;
  assign ins_ev.lookup      = 1'b0;
  assign ins_ev.hit         = 1'b0;
  assign ins_ev.second_step = 1'b0;
  assign ins_ev.fill        = 1'b1;

  function automatic set_t empty_set();
    set_t s;
    s = '0;
    for (int w = 0; w < NWAYS; w++) s.age[w] = WAY_W'(w);
    return s;
  endfunction

  assign lk_ready_o   = state == S_IDLE && !fill_valid_i;
  assign fill_ready_o = state == S_IDLE;
  assign rsp_valid_o  = state == S_RESP;

  // Set array: one read or one write per cycle.
  always_ff @(posedge clk) begin
    if (state == S_INIT) begin
      mem[init_idx] <= empty_set();
    end else if (state == S_READ) begin
      rd_q <= mem[va_set(va_q)];
    end else if (state == S_EVAL) begin
      if (op_fill) begin
        mem[va_set(va_q)] <= ins_set;
      end else if (lk_hit) begin
        set_t s;
        s     = rd_q;
        s.age = lk_age;
        mem[va_set(va_q)] <= s;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_INIT;
      init_idx    <= '0;
      op_fill     <= 1'b0;
      va_q        <= '0;
      pid_q       <= '0;
      pas_q       <= '0;
      dirty_q     <= 1'b0;
      tag_q       <= '0;
      step_q      <= 1'b0;
      cnt         <= '0;
      target      <= '0;
      rsp_hit_o   <= 1'b0;
      rsp_pa_o    <= '0;
      fill_done_o <= 1'b0;
      ev_o        <= '0;
    end else begin
      fill_done_o <= 1'b0;
      ev_o        <= '0;
      cnt         <= cnt + 1'b1;
      case (state)
        S_INIT: begin
          init_idx <= init_idx + 1'b1;
          if (init_idx == SET_W'(NSETS-1)) state <= S_IDLE;
        end
        S_IDLE: begin
          cnt    <= '0;
          step_q <= 1'b0;
          if (fill_valid_i) begin
            op_fill <= 1'b1;
            va_q    <= fill_va_i;
            pid_q   <= fill_pid_i;
            pas_q   <= fill_pas_i;
            dirty_q <= fill_dirty_i;
            state   <= S_READ;
          end else if (lk_valid_i) begin
            op_fill <= 1'b0;
            va_q    <= lk_va_i;
            pid_q   <= lk_pid_i;
            tag_q   <= lk_tag_i;
            state   <= S_READ;
          end
        end
        S_READ: state <= S_EVAL;
        S_EVAL: begin
          if (op_fill) begin
            fill_done_o <= 1'b1;
            ev_o        <= ins_ev;
            state       <= S_IDLE;
          end else if (!lk_hit && lk_shared && !step_q) begin
            // Base 1 missed everywhere and some entry is shared: compare
            // Base 2 on the same comparators in the next cycle.
            step_q <= 1'b1;
          end else begin
            rsp_hit_o <= lk_hit;
            rsp_pa_o  <= {lk_pas, va_q[OFF_W-1:0]};
            target    <= step_q ? $bits(target)'(2 * LOOKUP_LAT) : $bits(target)'(LOOKUP_LAT);
            ev_o.lookup      <= 1'b1;
            ev_o.hit         <= lk_hit;
            ev_o.second_step <= step_q;
            if (LOOKUP_LAT <= 3 && !step_q) state <= S_RESP;
            else                            state <= S_WAIT;
          end
        end
        // cnt counts clock edges since the request handshake minus one; the
        // response handshake can first happen at edge LOOKUP_LAT (or twice
        // that) after the request handshake.
        S_WAIT: if (32'(cnt) + 2 >= 32'(target)) state <= S_RESP;
        S_RESP: if (rsp_ready_i) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign rsp_va_o  = va_q;
  assign rsp_pid_o = pid_q;
  assign rsp_tag_o = tag_q;

endmodule
