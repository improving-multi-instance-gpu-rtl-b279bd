// star_rr_arb: round-robin arbiter for the L2 TLB request ports.
//
// Grants one of N requesters; the search starts one past the last granted
// port, so every waiting port is served within N grants. The priority
// pointer moves only when the grant is taken (advance_i). Combinational
// grant, pointer updated on the clock edge. The round-robin policy is this
// design's choice; the paper says only that the L3 TLB is shared by all GPCs.
module star_rr_arb #(
  parameter int unsigned N = 7
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req_i,
  input  logic                 advance_i,
  output logic                 valid_o,
  output logic [$clog2(N)-1:0] idx_o
);

  logic [$clog2(N)-1:0] ptr;

  always_comb begin
    valid_o = 1'b0;
    idx_o   = '0;
    for (int k = 0; k < N; k++) begin
      int unsigned i;
      i = (int'(ptr) + k) % N;
      if (!valid_o && req_i[i]) begin
        valid_o = 1'b1;
        idx_o   = $clog2(N)'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     ptr <= '0;
    else if (advance_i && valid_o)  ptr <= (idx_o == $clog2(N)'(N-1)) ? '0 : idx_o + 1'b1;
  end

endmodule
