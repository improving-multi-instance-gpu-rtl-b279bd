// tb_star_top: end-to-end test of the shared L3 TLB with its default
// parameters (7 request ports, 128 x 8 entries, 40-cycle lookup).
//
// Seven L2 TLB ports issue translation requests for three processes, as for
// a GPU split into 3g+2g+2g instances: ports 0-2 belong to process 0 (stride
// accesses, like a matrix transpose), ports 3-4 to process 1 (streams),
// ports 5-6 to process 2 (random pages), with re-use of recent pages. The
// accesses fall into two TLB sets so that entries are contended and shared.
// A behavioural page walker (GMMU model) answers misses after WALK_LAT
// cycles, sometimes refusing new walks for a while, and reports a page fault
// for pages whose VPB has bit 4 set in process 2.
// Checks: every response carries the frame the page table gives (or the
// fault), L3 hits come LOOKUP_LAT+1 or 2*LOOKUP_LAT+1 cycles after the
// request handshake, and every mechanism (hit, miss, Base 2 step, fault,
// each insertion case, arbitration conflict, walker back-pressure) occurs.
module tb_star_top;
  import star_pkg::*;

  localparam int NP = 7;
  localparam int LAT = 40;
  localparam int WALK_LAT = 400;
  localparam int N_PER_PORT = 400;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NP-1:0]            req_valid = '0, req_ready;
  logic [NP-1:0][VA_W-1:0]  req_va = '0;
  pid_t [NP-1:0]            req_pid = '0;
  logic [NP-1:0]            rsp_valid, rsp_l3_hit, rsp_fault;
  logic [NP-1:0][PA_W-1:0]  rsp_pa;
  logic                     walk_valid, walk_ready;
  logic [VA_W-1:0]          walk_va;
  pid_t                     walk_pid;
  logic [2:0]               walk_tag;
  logic                     wr_valid = 0, wr_ready;
  logic [VA_W-1:0]          wr_va = '0;
  pid_t                     wr_pid = '0;
  logic [2:0]               wr_tag = '0;
  pas_t                     wr_pas = '0;
  logic                     wr_fault = 0;
  tlb_ev_t                  ev;

  star_top dut (
    .clk, .rst_n,
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_va_i(req_va), .req_pid_i(req_pid),
    .rsp_valid_o(rsp_valid), .rsp_pa_o(rsp_pa), .rsp_l3_hit_o(rsp_l3_hit), .rsp_fault_o(rsp_fault),
    .walk_valid_o(walk_valid), .walk_ready_i(walk_ready), .walk_va_o(walk_va),
    .walk_pid_o(walk_pid), .walk_tag_o(walk_tag),
    .walk_rsp_valid_i(wr_valid), .walk_rsp_ready_o(wr_ready), .walk_rsp_va_i(wr_va),
    .walk_rsp_pid_i(wr_pid), .walk_rsp_tag_i(wr_tag), .walk_rsp_pas_i(wr_pas),
    .walk_rsp_dirty_i(1'b0), .walk_rsp_fault_i(wr_fault), .ev_o(ev)
  );

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // Page table of the walker model.
  function automatic pas_t frame_of(logic [VA_W-1:0] va, pid_t pid);
    return {pid, va[56:16]} ^ 52'h3_1234_0000_0007;
  endfunction
  function automatic bit faults(logic [VA_W-1:0] va, pid_t pid);
    return pid == 3'd2 && va[27 + 4];
  endfunction

  // ---- behavioural GMMU: a FIFO of walks, each done WALK_LAT cycles after it is taken
  typedef struct { logic [VA_W-1:0] va; pid_t pid; logic [2:0] tag; longint due; } walk_t;
  walk_t wq[$];
  int n_backpressure = 0;
  always @(negedge clk) walk_ready = (cyc / 50) % 4 != 3;
  always @(posedge clk) if (rst_n && walk_valid && walk_ready)
    wq.push_back('{walk_va, walk_pid, walk_tag, cyc + WALK_LAT});
  always @(posedge clk) if (rst_n && walk_valid && !walk_ready) n_backpressure++;
  always @(negedge clk) begin
    if (wr_valid && wr_ready_seen) begin
      wr_valid = 0;
    end
    if (!wr_valid && wq.size() > 0 && wq[0].due <= cyc) begin
      automatic walk_t w = wq.pop_front();
      wr_valid = 1; wr_va = w.va; wr_pid = w.pid; wr_tag = w.tag;
      wr_pas = frame_of(w.va, w.pid); wr_fault = faults(w.va, w.pid);
    end
  end
  logic wr_ready_seen = 0;
  always @(posedge clk) wr_ready_seen <= wr_valid && wr_ready;

  // ---- mechanism counters
  int n_hit, n_miss, n_fault, n_second, n_conflict_arb;
  int cnt[string];
  always @(posedge clk) if (rst_n) begin
    if ($countones(req_valid) > 1) n_conflict_arb++;
    if (ev.lookup && ev.second_step) n_second++;
    if (ev.fill) begin
      if (ev.unshare) cnt["unshare"]++;
      else if (ev.conflict) cnt["conflict"]++;
      else if (ev.base_hit) cnt["base_hit"]++;
      if (ev.vacant) cnt["vacant"]++;
      if (ev.share_seq) cnt["share_seq"]++;
      if (ev.share_str) cnt["share_str"]++;
      if (ev.lru_evict) cnt["lru_evict"]++;
      if (ev.reloc_evict) cnt["reloc_evict"]++;
    end
  end

  function automatic pid_t pid_of_port(int p);
    return p < 3 ? 3'd0 : p < 5 ? 3'd1 : 3'd2;
  endfunction

  logic [VA_W-1:0] hist[NP][$];
  int sptr[NP];
  int done_ports = 0;
  string names[8] = '{"vacant", "base_hit", "conflict", "share_seq", "share_str",
                      "reloc_evict", "lru_evict", "unshare"};

  function automatic logic [VA_W-1:0] gen_va(int p);
    logic [29:0] vpb;
    logic [3:0]  sub;
    logic [6:0]  set;
    int k, j;
    j = int'($urandom % 4);
    if (hist[p].size() > 4 && $urandom % 100 < 35) begin
      j = hist[p].size() - 1 - j;
      return hist[p][j];
    end
    set = ($urandom % 2) ? 7'd3 : 7'd90;
    k = int'(pid_of_port(p));
    case (k)
      0: begin vpb = 30'(100 + $urandom % 20); sub = 4'(($urandom % 4) * 4 + $urandom % 2); end
      1: begin vpb = 30'(200 + p * 8 + (sptr[p] / 16) % 6); sub = 4'(sptr[p] % 16); sptr[p]++; set = 7'd3; end
      default: begin vpb = 30'(300 + $urandom % 24); sub = 4'($urandom); end
    endcase
    return {vpb, set, sub, 16'($urandom)};
  endfunction

  for (genvar gp = 0; gp < NP; gp++) begin : g_port
    initial begin
      @(posedge rst_n);
      for (int n = 0; n < N_PER_PORT; n++) begin
        logic [VA_W-1:0] va;
        longint t0;
        va = gen_va(gp);
        hist[gp].push_back(va);
        @(negedge clk);
        req_valid[gp] = 1; req_va[gp] = va; req_pid[gp] = pid_of_port(gp);
        // let every port drive its request before the grant is sampled
        #1;
        while (!req_ready[gp]) begin @(negedge clk); #1; end
        t0 = cyc;
        @(negedge clk);
        req_valid[gp] = 0;
        while (!rsp_valid[gp]) @(negedge clk);
        if (faults(va, pid_of_port(gp))) begin
          check(rsp_fault[gp] && !rsp_l3_hit[gp], $sformatf("port %0d fault expected", gp));
          n_fault++;
        end else begin
          check(!rsp_fault[gp] && rsp_pa[gp] == {frame_of(va, pid_of_port(gp)), va[15:0]},
                $sformatf("port %0d hit %0b fault %0b va %h pa %h expected %h", gp, rsp_l3_hit[gp], rsp_fault[gp], va, rsp_pa[gp], {frame_of(va, pid_of_port(gp)), va[15:0]}));
        end
        if (rsp_l3_hit[gp]) begin
          n_hit++;
          check(cyc - t0 == LAT + 1 || cyc - t0 == 2 * LAT + 1,
                $sformatf("port %0d hit latency %0d", gp, cyc - t0));
        end else n_miss++;
      end
      done_ports++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done_ports == NP);
    repeat (5) @(negedge clk);
    foreach (cnt[k]) $display("fill case %s: %0d", k, cnt[k]);
    $display("hits=%0d misses=%0d faults=%0d second_step=%0d arb_conflict_cycles=%0d walker_backpressure=%0d",
             n_hit, n_miss, n_fault, n_second, n_conflict_arb, n_backpressure);
    check(n_hit > 0, "L3 hits occurred");
    check(n_miss > 0, "L3 misses occurred");
    check(n_fault > 0, "page faults occurred");
    check(n_second > 0, "Base 2 lookup step occurred");
    check(n_conflict_arb > 0, "arbitration between ports occurred");
    check(n_backpressure > 0, "walker back-pressure occurred");
    foreach (names[i]) check(cnt.exists(names[i]), {"insertion case seen: ", names[i]});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
