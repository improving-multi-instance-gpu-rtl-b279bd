// tb_star_lru: randomized test of the LRU age logic.
//
// A set's ages start at age[w] = w. Random touches are applied through the
// module and the resulting ages are fed back, as the TLB does when it writes
// the set. The reference is an ordered list of ways (front = most recently
// used): the victim must be the last way of the list and every age must be
// the way's position in the list.
module tb_star_lru;
  import star_pkg::*;

  logic [NWAYS-1:0][WAY_W-1:0] age, age_n;
  logic touch;
  way_t touch_way, victim;
  int checks = 0, failures = 0;
  int order[$];

  star_lru dut (.age_i(age), .touch_i(touch), .touch_way_i(touch_way), .age_o(age_n), .victim_o(victim));

  initial begin
    for (int w = 0; w < NWAYS; w++) begin age[w] = WAY_W'(w); order.push_back(w); end
    for (int n = 0; n < 5000; n++) begin
      touch = ($urandom % 4) != 0;
      touch_way = way_t'($urandom);
      #1;
      checks++;
      if (int'(victim) != order[$]) begin
        failures++;
        if (failures < 10) $display("FAIL victim %0d expected %0d", victim, order[$]);
      end
      if (touch) begin
        foreach (order[i]) if (order[i] == int'(touch_way)) begin order.delete(i); break; end
        order.push_front(int'(touch_way));
      end
      foreach (order[i]) begin
        checks++;
        if (int'(age_n[order[i]]) != i) begin
          failures++;
          if (failures < 10) $display("FAIL age of way %0d = %0d expected %0d", order[i], age_n[order[i]], i);
        end
      end
      age = age_n;
      #1;
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
