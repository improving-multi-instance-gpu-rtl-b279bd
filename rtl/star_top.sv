// star_top: GPU-shared sub-entry sharing-aware L3 TLB with its request
// arbitration and page-walk miss path.
//
// Each GPU processing cluster (GPC) has an L2 TLB; L2 TLB misses arrive on
// one of NUM_PORTS request ports. A round-robin arbiter (star_rr_arb) passes
// one request at a time to the L3 TLB (star_l3_tlb). A hit is answered on the
// requesting port with the physical address (frame concatenated with the
// page offset). A miss is forwarded to the GPU memory management unit (GMMU,
// outside this design) as a page-walk request tagged with the port number.
// The walk result is inserted into the L3 TLB (the sharing-aware insertion
// policy) and answered on the port it came from; a failed walk (page fault)
// is answered with fault set and not inserted. Fault handling by the host
// and the replay of the request are outside this design.
//
// Interface: req_* are valid/ready per port; rsp_* are one-cycle pulses per
// port that the L2 TLB always accepts (this design's choice); walk_* is a
// valid/ready request to the GMMU and walk_rsp_* its valid/ready answer.
// Timing: an L3 hit is answered LOOKUP_LAT cycles after the request handshake
// plus one (registered response), 2*LOOKUP_LAT when the Base 2 check of a
// shared entry is needed. NUM_PORTS = 7 follows the up-to-seven MIG
// instances, each with at least one GPC; the paper gives no port count.
module star_top
  import star_pkg::*;
#(
  parameter int unsigned NUM_PORTS  = 7,
  parameter int unsigned LOOKUP_LAT = 40,
  localparam int unsigned PORT_W    = $clog2(NUM_PORTS)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // L2 TLB miss requests, one port per GPC
  input  logic [NUM_PORTS-1:0]       req_valid_i,
  output logic [NUM_PORTS-1:0]       req_ready_o,
  input  logic [NUM_PORTS-1:0][VA_W-1:0] req_va_i,
  input  pid_t [NUM_PORTS-1:0]       req_pid_i,
  // responses to the L2 TLBs
  output logic [NUM_PORTS-1:0]       rsp_valid_o,
  output logic [NUM_PORTS-1:0][PA_W-1:0] rsp_pa_o,
  output logic [NUM_PORTS-1:0]       rsp_l3_hit_o,
  output logic [NUM_PORTS-1:0]       rsp_fault_o,
  // page-walk requests to the GMMU
  output logic                       walk_valid_o,
  input  logic                       walk_ready_i,
  output logic [VA_W-1:0]            walk_va_o,
  output pid_t                       walk_pid_o,
  output logic [PORT_W-1:0]          walk_tag_o,
  // page-walk results from the GMMU
  input  logic                       walk_rsp_valid_i,
  output logic                       walk_rsp_ready_o,
  input  logic [VA_W-1:0]            walk_rsp_va_i,
  input  pid_t                       walk_rsp_pid_i,
  input  logic [PORT_W-1:0]          walk_rsp_tag_i,
  input  pas_t                       walk_rsp_pas_i,
  input  logic                       walk_rsp_dirty_i,
  input  logic                       walk_rsp_fault_i,
  // statistics
  output tlb_ev_t                    ev_o
);

  logic              arb_valid;
  logic [PORT_W-1:0] arb_idx;
  logic              lk_ready;
  logic              t_rsp_valid, t_rsp_ready, t_rsp_hit;
  logic [PA_W-1:0]   t_rsp_pa;
  logic [VA_W-1:0]   t_rsp_va;
  pid_t              t_rsp_pid;
  logic [PORT_W-1:0] t_rsp_tag;
  logic              fill_ready, fill_done;

  star_rr_arb #(.N(NUM_PORTS)) u_arb (
    .clk       (clk),
    .rst_n     (rst_n),
    .req_i     (req_valid_i),
    .advance_i (lk_ready),
    .valid_o   (arb_valid),
    .idx_o     (arb_idx)
  );

  always_comb begin
    req_ready_o = '0;
    req_ready_o[arb_idx] = arb_valid && lk_ready;
  end

  star_l3_tlb #(.LOOKUP_LAT(LOOKUP_LAT), .TAG_W(PORT_W)) u_l3 (
    .clk          (clk),
    .rst_n        (rst_n),
    .lk_valid_i   (arb_valid),
    .lk_ready_o   (lk_ready),
    .lk_va_i      (req_va_i[arb_idx]),
    .lk_pid_i     (req_pid_i[arb_idx]),
    .lk_tag_i     (arb_idx),
    .rsp_valid_o  (t_rsp_valid),
    .rsp_ready_i  (t_rsp_ready),
    .rsp_hit_o    (t_rsp_hit),
    .rsp_pa_o     (t_rsp_pa),
    .rsp_va_o     (t_rsp_va),
    .rsp_pid_o    (t_rsp_pid),
    .rsp_tag_o    (t_rsp_tag),
    .fill_valid_i (walk_rsp_valid_i && !walk_rsp_fault_i),
    .fill_ready_o (fill_ready),
    .fill_va_i    (walk_rsp_va_i),
    .fill_pid_i   (walk_rsp_pid_i),
    .fill_pas_i   (walk_rsp_pas_i),
    .fill_dirty_i (walk_rsp_dirty_i),
    .fill_done_o  (fill_done),
    .ev_o         (ev_o)
  );

  // Misses go to the GMMU; hits are answered at once.
  assign walk_valid_o     = t_rsp_valid && !t_rsp_hit;
  assign walk_va_o        = t_rsp_va;
  assign walk_pid_o       = t_rsp_pid;
  assign walk_tag_o       = t_rsp_tag;
  assign t_rsp_ready      = t_rsp_hit || walk_ready_i;
  // Walk results are taken when the TLB is idle, which never coincides
  // with a lookup response, so the two never answer in the same cycle.
  assign walk_rsp_ready_o = fill_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid_o  <= '0;
      rsp_pa_o     <= '0;
      rsp_l3_hit_o <= '0;
      rsp_fault_o  <= '0;
    end else begin
      rsp_valid_o  <= '0;
      if (t_rsp_valid && t_rsp_hit) begin
        rsp_valid_o[t_rsp_tag]  <= 1'b1;
        rsp_pa_o[t_rsp_tag]     <= t_rsp_pa;
        rsp_l3_hit_o[t_rsp_tag] <= 1'b1;
        rsp_fault_o[t_rsp_tag]  <= 1'b0;
      end else if (walk_rsp_valid_i && walk_rsp_ready_o) begin
        rsp_valid_o[walk_rsp_tag_i]  <= 1'b1;
        rsp_pa_o[walk_rsp_tag_i]     <= {walk_rsp_pas_i, walk_rsp_va_i[OFF_W-1:0]};
        rsp_l3_hit_o[walk_rsp_tag_i] <= 1'b0;
        rsp_fault_o[walk_rsp_tag_i]  <= walk_rsp_fault_i;
      end
    end
  end

  // The lookup response and a walk result are never taken together.
  assert property (@(posedge clk) disable iff (!rst_n)
    !(t_rsp_valid && walk_rsp_valid_i && walk_rsp_ready_o));

endmodule
