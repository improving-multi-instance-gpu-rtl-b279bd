// tb_star_l3_tlb: self-checking test of the sharing-aware L3 TLB at its
// default size (128 sets x 8 ways, 40-cycle lookup).
//
// Three processes access a small number of sets with stream, stride and
// random page patterns so that sets fill up and every insertion case occurs.
// Every access is a lookup; a miss is followed by a fill, as the page walker
// would do. Each lookup is checked against the reference model
// (star_ref_pkg) for hit, physical address and latency (40 cycles, or 80
// when the Base 2 step of a shared entry is needed). Each fill is checked for
// the insertion case the model predicts. Counts of every case are required
// to be non-zero.
module tb_star_l3_tlb;
  import star_pkg::*;
  import star_ref_pkg::*;

  localparam int LAT = 40;
  localparam int N_ACCESS = 1500;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            lk_valid = 0, lk_ready;
  logic [VA_W-1:0] lk_va = '0;
  pid_t            lk_pid = '0;
  logic [3:0]      lk_tag = '0;
  logic            rsp_valid, rsp_hit;
  logic [PA_W-1:0] rsp_pa;
  logic [VA_W-1:0] rsp_va;
  pid_t            rsp_pid;
  logic [3:0]      rsp_tag;
  logic            fill_valid = 0, fill_ready, fill_done;
  logic [VA_W-1:0] fill_va = '0;
  pid_t            fill_pid = '0;
  pas_t            fill_pas = '0;
  tlb_ev_t         ev;

  star_l3_tlb #(.LOOKUP_LAT(LAT)) dut (
    .clk, .rst_n,
    .lk_valid_i(lk_valid), .lk_ready_o(lk_ready), .lk_va_i(lk_va), .lk_pid_i(lk_pid),
    .lk_tag_i(lk_tag),
    .rsp_valid_o(rsp_valid), .rsp_ready_i(1'b1), .rsp_hit_o(rsp_hit), .rsp_pa_o(rsp_pa),
    .rsp_va_o(rsp_va), .rsp_pid_o(rsp_pid), .rsp_tag_o(rsp_tag),
    .fill_valid_i(fill_valid), .fill_ready_o(fill_ready), .fill_va_i(fill_va),
    .fill_pid_i(fill_pid), .fill_pas_i(fill_pas), .fill_dirty_i(1'b0),
    .fill_done_o(fill_done), .ev_o(ev)
  );

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  star_ref m;
  int n_hit, n_miss, n_second;
  int ev_cnt[string];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic pas_t frame_of(logic [VA_W-1:0] va, pid_t pid);
    return {pid, va[56:16]} ^ 52'h5_a5a5_0000_0001;
  endfunction

  task automatic lookup(logic [VA_W-1:0] va, pid_t pid, output bit hit);
    longint t0, t1;
    bit e_hit, e_second;
    bit [51:0] e_pas;
    @(negedge clk);
    lk_valid = 1; lk_va = va; lk_pid = pid; lk_tag = lk_tag + 1;
    while (!lk_ready) @(negedge clk);
    t0 = cyc;
    @(negedge clk);
    lk_valid = 0;
    while (!rsp_valid) @(negedge clk);
    t1 = cyc;
    m.lookup(va, pid, e_hit, e_pas, e_second);
    check(rsp_hit == e_hit, $sformatf("hit %0b expected %0b va=%h", rsp_hit, e_hit, va));
    if (e_hit)
      check(rsp_pa == {e_pas, va[15:0]}, $sformatf("pa %h expected %h", rsp_pa, {e_pas, va[15:0]}));
    check(t1 - t0 == (e_second ? 2*LAT : LAT),
          $sformatf("latency %0d expected %0d", t1 - t0, e_second ? 2*LAT : LAT));
    check(rsp_tag == lk_tag && rsp_va == va && rsp_pid == pid, "response tag/va/pid");
    if (e_second) n_second++;
    if (e_hit) n_hit++; else n_miss++;
    hit = e_hit;
    @(negedge clk);
  endtask

  task automatic fill(logic [VA_W-1:0] va, pid_t pid);
    string got;
    @(negedge clk);
    fill_valid = 1; fill_va = va; fill_pid = pid; fill_pas = frame_of(va, pid);
    while (!fill_ready) @(negedge clk);
    @(negedge clk);
    fill_valid = 0;
    while (!fill_done) @(negedge clk);
    m.insert(va, pid, frame_of(va, pid));
    got = ev.unshare ? "unshare" : ev.conflict ? "conflict" : ev.base_hit ? "base_hit" :
          ev.vacant ? "vacant" : ev.share_seq ? "share_seq" : ev.share_str ? "share_str" :
          ev.lru_evict ? "lru_evict" : "none";
    check(got == m.last_case, $sformatf("fill case %s expected %s", got, m.last_case));
    ev_cnt[got]++;
    if (ev.reloc_evict) ev_cnt["reloc_evict"]++;
  endtask

  // Address of process pid: one of two sets, VPB from a small pool per process.
  int seq_ptr[3];
  function automatic logic [VA_W-1:0] gen_va(pid_t pid, int mode);
    logic [29:0] vpb;
    logic [6:0]  set;
    logic [3:0]  sub;
    set = ($urandom % 2) ? 7'd5 : 7'd77;
    case (mode)
      0: begin  // stream: walk sub-entries of one base after another
        vpb = 30'(pid * 64 + (seq_ptr[pid] / 16) % 10);
        sub = 4'(seq_ptr[pid] % 16);
        set = 7'd5;
        seq_ptr[pid]++;
      end
      1: begin  // stride: a few sub-entries of many bases
        vpb = 30'(pid * 64 + $urandom % 24);
        sub = 4'(($urandom % 4) * 4 + ($urandom % 2));
      end
      default: begin
        vpb = 30'(pid * 64 + $urandom % 12);
        sub = 4'($urandom);
      end
    endcase
    return {vpb, set, sub, 16'($urandom)};
  endfunction

  logic [VA_W-1:0] hist[$];
  pid_t            hist_pid[$];

  initial begin
    bit hit;
    m = new();
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < N_ACCESS; n++) begin
      pid_t pid;
      logic [VA_W-1:0] va;
      pid = pid_t'($urandom % 3);
      va  = gen_va(pid, (n < 300) ? int'(pid) : int'($urandom % 3));
      // re-touch recently used pages to create hits
      if (hist.size() > 8 && $urandom % 100 < 40) begin
        int j = hist.size() - 1 - int'($urandom % 8);
        va  = hist[j];
        pid = hist_pid[j];
      end
      hist.push_back(va);
      hist_pid.push_back(pid);
      if (hist.size() > 64) begin void'(hist.pop_front()); void'(hist_pid.pop_front()); end
      lookup(va, pid, hit);
      if (!hit) fill(va, pid);
    end
    foreach (ev_cnt[k]) $display("fill case %s: %0d", k, ev_cnt[k]);
    $display("lookups hit=%0d miss=%0d second_step=%0d", n_hit, n_miss, n_second);
    check(n_hit > 0 && n_miss > 0 && n_second > 0, "hit, miss and second-step lookups seen");
    check(ev_cnt.exists("vacant"),      "vacant case seen");
    check(ev_cnt.exists("share_seq"),   "sequential sharing seen");
    check(ev_cnt.exists("share_str"),   "stride sharing seen");
    check(ev_cnt.exists("lru_evict"),   "LRU eviction seen");
    check(ev_cnt.exists("unshare"),     "shared->non-shared seen");
    check(ev_cnt.exists("conflict"),    "same-base conflict seen");
    check(ev_cnt.exists("reloc_evict"), "relocation eviction seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
