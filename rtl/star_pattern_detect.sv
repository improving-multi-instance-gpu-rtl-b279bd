// star_pattern_detect: occupancy pattern of the 16 sub-entries of one entry.
//
// When a non-shared entry is chosen to take a second base address, the
// pattern of its occupied sub-entries picks the layout: occupied slots that
// form one run without gaps are "consecutive" and select the sequential
// layout; any gap between the first and last occupied slot selects the
// stride layout. The module also counts the occupied sub-entries (the
// entry's utilization, used by the sharing policy).
//
// Purely combinational. An empty entry counts as consecutive. The run is
// taken without wrap-around from slot 15 to slot 0; the paper says only
// "occupied continuously without any gaps".
module star_pattern_detect
  import star_pkg::*;
(
  input  logic [NSUB-1:0]        valid_i,
  output logic                   consecutive_o,
  output logic [$clog2(NSUB):0]  count_o
);

  logic [NSUB-1:0] starts;  // slot i occupied and slot i-1 not

  always_comb begin
    count_o = '0;
    for (int i = 0; i < NSUB; i++) begin
      count_o += valid_i[i];
      starts[i] = valid_i[i] && (i == 0 || !valid_i[(i == 0) ? 0 : i-1]);
    end
    consecutive_o = $countones(starts) <= 1;
  end

endmodule
