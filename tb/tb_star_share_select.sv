// tb_star_share_select: randomized test of the sharing-candidate selector.
//
// Random way states (valid, shared, utilization 0..16, process) and a random
// requesting process are applied. The expected choice is worked out by a
// two-pass search: first the eligible ways of the same process, and only if
// there is none, all eligible ways; in the chosen group the lowest
// utilization wins, ties to the lowest way. A few directed cases pin the
// same-process preference and the 8-sub-entry limit.
module tb_star_share_select;
  import star_pkg::*;

  logic [NWAYS-1:0]      valid, shared;
  logic [NWAYS-1:0][4:0] count;
  pid_t [NWAYS-1:0]      pid;
  pid_t                  req_pid;
  logic                  found, same_pid;
  way_t                  way;
  int checks = 0, failures = 0;

  star_share_select dut (
    .valid_i(valid), .shared_i(shared), .count_i(count), .pid_i(pid),
    .req_pid_i(req_pid), .found_o(found), .same_pid_o(same_pid), .way_o(way)
  );

  task automatic expect_choice(string what);
    int e_way = -1, best = 100;
    bit pref = 0;
    #1;
    for (int w = 0; w < NWAYS; w++)
      if (valid[w] && !shared[w] && count[w] < 8 && pid[w] == req_pid) pref = 1;
    for (int w = 0; w < NWAYS; w++)
      if (valid[w] && !shared[w] && count[w] < 8 && (!pref || pid[w] == req_pid) && count[w] < best) begin
        best = count[w]; e_way = w;
      end
    checks++;
    if (found != (e_way >= 0) || (e_way >= 0 && int'(way) != e_way) || same_pid != pref) begin
      failures++;
      if (failures < 10) $display("FAIL %s: found=%0b way=%0d expected %0d", what, found, way, e_way);
    end
  endtask

  initial begin
    // directed: way 2 (other process, 1 used) vs way 5 (same process, 6 used)
    valid = '1; shared = '0; req_pid = 3'd1;
    for (int w = 0; w < NWAYS; w++) begin count[w] = 5'd9; pid[w] = 3'd0; end
    count[2] = 5'd1; count[5] = 5'd6; pid[5] = 3'd1;
    expect_choice("same process preferred");
    checks++; if (!(found && way == 3'd5)) failures++;
    count[5] = 5'd8;  // 8 used: not eligible
    expect_choice("8 used not eligible");
    checks++; if (!(found && way == 3'd2)) failures++;
    shared[2] = 1'b1;
    expect_choice("shared not eligible");
    checks++; if (found) failures++;
    for (int n = 0; n < 20000; n++) begin
      valid = NWAYS'($urandom); shared = NWAYS'($urandom & $urandom);
      for (int w = 0; w < NWAYS; w++) begin count[w] = 5'($urandom % 17); pid[w] = pid_t'($urandom % 4); end
      req_pid = pid_t'($urandom % 4);
      expect_choice("random");
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
