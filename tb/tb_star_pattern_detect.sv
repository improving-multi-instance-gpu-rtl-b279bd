// tb_star_pattern_detect: exhaustive test of the occupancy pattern detector.
//
// All 65536 occupancy vectors are applied. The expected result is computed
// from the first and last occupied slot: the pattern is consecutive when
// every slot between them is occupied (an empty vector counts as
// consecutive); the count is the number of occupied slots.
module tb_star_pattern_detect;
  import star_pkg::*;

  logic [NSUB-1:0] valid;
  logic            consec;
  logic [4:0]      count;
  int checks = 0, failures = 0;

  star_pattern_detect dut (.valid_i(valid), .consecutive_o(consec), .count_o(count));

  initial begin
    for (int v = 0; v < 65536; v++) begin
      int first, last, c;
      bit e_consec;
      valid = 16'(v);
      #1;
      first = -1; last = -1; c = 0;
      for (int i = 0; i < 16; i++) if (v[i]) begin
        if (first < 0) first = i;
        last = i;
        c++;
      end
      e_consec = (c == 0) || (last - first + 1 == c);
      checks += 2;
      if (consec !== e_consec) begin
        failures++;
        if (failures < 10) $display("FAIL consecutive %b: got %0b", valid, consec);
      end
      if (int'(count) != c) begin
        failures++;
        if (failures < 10) $display("FAIL count %b: got %0d", valid, count);
      end
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
