// tb_star_lookup: randomized test of the set hit logic.
//
// A set is populated by the reference model (star_ref_pkg) with random fills
// of three processes, so that it contains non-shared entries and entries
// shared in sequential and stride layout. The model's state is converted
// into the RTL set format and random lookups, including pages of the right
// base with the wrong AIB and of the wrong process, are compared with the
// model: hit, frame and whether the Base 2 step was needed. The testbench
// sequences the two steps as the TLB does: step 1 (Base 1), and step 2
// (Base 2) only after a step-1 miss in a set with a shared entry. Directed
// checks pin the AIB comparison of each shared layout.
module tb_star_lookup;
  import star_pkg::*;
  import star_ref_pkg::*;

  set_t  set;
  pid_t  pid;
  vpb_t  vpb;
  sidx_t sidx;
  logic  step, hit, base_hit, shared;
  logic  r_hit, r_base2, r_base_hit, second;
  pas_t  r_pas;
  way_t  hway;
  pas_t  pas;
  int checks = 0, failures = 0;
  int n_hit2 = 0, n_hit1 = 0, n_second = 0, n_miss = 0;

  star_lookup dut (
    .set_i(set), .step_i(step), .pid_i(pid), .vpb_i(vpb), .sidx_i(sidx),
    .hit_o(hit), .hit_way_o(hway), .base_hit_o(base_hit),
    .pas_o(pas), .shared_o(shared)
  );

  // One lookup as the TLB performs it: Base 1 step, then Base 2 step when
  // needed. Results in r_hit, r_pas, r_base2 (hit on Base 2), second.
  task automatic do_lookup();
    step = 1'b0; #1;
    r_hit = hit; r_pas = pas; r_base2 = 1'b0; r_base_hit = base_hit; second = 1'b0;
    if (!hit && shared) begin
      step = 1'b1; #1;
      second = 1'b1;
      r_hit = hit; r_pas = pas; r_base2 = hit; r_base_hit = r_base_hit || base_hit;
    end
  endtask

  star_ref m;

  // RTL view of set 0 of the model. AIB of a slot follows from the original
  // index the model stores: top bit (sequential) or low bit (stride).
  function automatic set_t model_set();
    set_t s = '0;
    for (int w = 0; w < NWAYS; w++) begin
      for (int b = 0; b < 2; b++)
        s.way[w].base[b] = '{v: m.base[0][w][b].v, d: 1'b0, pid: m.base[0][w][b].pid, vpb: m.base[0][w][b].vpb};
      s.way[w].layout = layout_e'(m.layout[0][w]);
      for (int k = 0; k < NSUB; k++) begin
        s.way[w].sub[k].v   = m.sv[0][w][k];
        s.way[w].sub[k].aib = m.layout[0][w] == 1 ? m.sorig[0][w][k][3] :
                              m.layout[0][w] == 2 ? m.sorig[0][w][k][0] : 1'b0;
        s.way[w].sub[k].pas = m.spas[0][w][k];
      end
    end
    return s;
  endfunction

  function automatic logic [56:0] mk_va(int p, int base, int sub);
    return {30'(p * 32 + base), 7'd0, 4'(sub), 16'h0};
  endfunction

  initial begin
    for (int trial = 0; trial < 40; trial++) begin
      m = new();
      for (int f = 0; f < 60; f++) begin
        automatic int p = $urandom % 3;
        automatic int sub = (trial % 2) ? int'($urandom % 16) : int'(($urandom % 4) * 4 + $urandom % 2);
        automatic logic [56:0] va = mk_va(p, $urandom % 14, sub);
        m.insert(va, 3'(p), 52'($urandom) ^ (52'(f) << 40));
      end
      set = model_set();
      for (int q = 0; q < 200; q++) begin
        automatic bit e_hit, e_second;
        bit [51:0] e_pas;
        automatic int p = $urandom % 4;
        automatic logic [56:0] va = mk_va(p, $urandom % 14, $urandom % 16);
        pid = 3'(p); vpb = va[56:27]; sidx = va[19:16];
        do_lookup();
        m.lookup(va, 3'(p), e_hit, e_pas, e_second);
        checks++;
        if (r_hit != e_hit || (e_hit && r_pas != e_pas) || second != e_second) begin
          failures++;
          if (failures < 10) $display("FAIL va=%h pid=%0d hit=%0b/%0b pas=%h/%h second=%0b/%0b",
                                      va, p, r_hit, e_hit, r_pas, e_pas, second, e_second);
        end
        if (r_hit && r_base2) n_hit2++;
        if (r_hit && !r_base2) n_hit1++;
        if (!r_hit) n_miss++;
        if (second) n_second++;
      end
    end
    // directed: one entry shared sequentially, one in stride layout
    set = '0;
    set.way[0].base[0] = '{v: 1'b1, d: 1'b0, pid: 3'd0, vpb: 30'd10};
    set.way[0].base[1] = '{v: 1'b1, d: 1'b0, pid: 3'd0, vpb: 30'd11};
    set.way[0].layout  = LAYOUT_SEQ;
    set.way[0].sub[8 + 3] = '{v: 1'b1, aib: 1'b1, pas: 52'h111};  // base 2, index 1011
    set.way[1].base[0] = '{v: 1'b1, d: 1'b0, pid: 3'd0, vpb: 30'd20};
    set.way[1].base[1] = '{v: 1'b1, d: 1'b0, pid: 3'd0, vpb: 30'd21};
    set.way[1].layout  = LAYOUT_STR;
    set.way[1].sub[2*5 + 0] = '{v: 1'b1, aib: 1'b1, pas: 52'h222}; // base 1, index 1011
    pid = 0; vpb = 30'd11; sidx = 4'b1011; do_lookup();
    checks++; if (!(r_hit && r_base2 && r_pas == 52'h111 && second)) begin failures++; $display("FAIL seq base 2"); end
    sidx = 4'b0011; do_lookup();
    checks++; if (r_hit || !r_base_hit) begin failures++; $display("FAIL seq AIB mismatch"); end
    vpb = 30'd20; sidx = 4'b1011; do_lookup();
    checks++; if (!(r_hit && !r_base2 && r_pas == 52'h222 && !second)) begin failures++; $display("FAIL stride base 1"); end
    sidx = 4'b1010; do_lookup();
    checks++; if (r_hit) begin failures++; $display("FAIL stride AIB mismatch"); end
    // Base 2 is not compared in step 1, Base 1 not in step 2
    vpb = 30'd11; sidx = 4'b1011; step = 1'b0; #1;
    checks++; if (hit || base_hit) begin failures++; $display("FAIL Base 2 matched in step 1"); end
    vpb = 30'd20; step = 1'b1; #1;
    checks++; if (hit || base_hit) begin failures++; $display("FAIL Base 1 matched in step 2"); end
    $display("hits base1=%0d base2=%0d misses=%0d second=%0d", n_hit1, n_hit2, n_miss, n_second);
    checks++; if (n_hit1 == 0 || n_hit2 == 0 || n_second == 0) failures++;
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
