// star_share_select: chooses the entry that a new base address will share.
//
// Used when a fill misses every base of a set whose ways are all allocated.
// A way is eligible when it holds exactly one base (valid, layout 00) and
// fewer than 8 of its 16 sub-entries are in use. Among eligible ways those
// whose base belongs to the requesting process are preferred; within the
// preferred group (or among all eligible ways when no way of the same process
// is eligible) the way with the lowest utilization wins. Ties go to the
// lowest way number, which is this design's choice. found_o low means no way
// is eligible and the caller falls back to LRU eviction.
//
// Purely combinational.
module star_share_select
  import star_pkg::*;
(
  input  logic [NWAYS-1:0]                 valid_i,   // Base 1 valid
  input  logic [NWAYS-1:0]                 shared_i,  // layout != 00
  input  logic [NWAYS-1:0][$clog2(NSUB):0] count_i,   // used sub-entries
  input  pid_t [NWAYS-1:0]                 pid_i,     // process of Base 1
  input  pid_t                             req_pid_i,
  output logic                             found_o,
  output logic                             same_pid_o,
  output way_t                             way_o
);

  logic [NWAYS-1:0] elig, elig_pid, pool;

  always_comb begin
    logic [$clog2(NSUB):0] best;
    for (int w = 0; w < NWAYS; w++) begin
      elig[w]     = valid_i[w] && !shared_i[w] && 32'(count_i[w]) < SHARE_MAX;
      elig_pid[w] = elig[w] && pid_i[w] == req_pid_i;
    end
    same_pid_o = |elig_pid;
    found_o    = |elig;
    pool       = same_pid_o ? elig_pid : elig;
    way_o      = '0;
    best       = '1;
    for (int w = 0; w < NWAYS; w++) begin
      if (pool[w] && count_i[w] < best) begin
        best  = count_i[w];
        way_o = way_t'(w);
      end
    end
  end

endmodule
