// mmu: memory management unit of one NDP core.
//
// Two translation ports, instruction fetch (port 0) and data (port 1), each
// backed by its own L1 TLB (ITLB 128 entries / 4 ways, DTLB 64 entries /
// 4 ways, 1-cycle lookup). An L1 miss is handed to a single miss handler that
// serves one miss at a time: it looks up the shared L2 TLB (1536 entries,
// 12-cycle lookup) and, if that misses too, starts the page table walker
// (ptw), which walks PL4, PL3 and the flattened PL2/PL1 table through its
// page walk caches and reads missing PTEs from memory over the metadata port
// that bypasses the L1 caches. A completed walk fills the L2 TLB and the
// requesting L1 TLB; an L2 TLB hit fills the L1 TLB. A not-present PTE is
// returned as a fault and nothing is filled.
//
// Timing: an L1 TLB hit answers 1 cycle after the request, an L2 TLB hit 1
// cycle for the L1 lookup, 1 to hand over and 12 for the L2 lookup later.
// Each port takes a new request once it has answered the previous one. When
// both ports have a miss waiting, the miss handler alternates between them.
//
// Follows the paper: the TLB sizes and latencies (Table I), the TLB-miss ->
// walker flow (Figs. 3 and 11) and the walker itself. This design's choices:
// the L2 TLB organisation (128 sets x 12 ways), a blocking miss handler, and
// flush (for a CR3 change) clearing all TLBs and PWCs at once.
module mmu
  import ndp_pkg::*;
#(
  parameter int unsigned ITLB_SETS   = 32,
  parameter int unsigned ITLB_WAYS   = 4,
  parameter int unsigned DTLB_SETS   = 16,
  parameter int unsigned DTLB_WAYS   = 4,
  parameter int unsigned L1TLB_LAT   = 1,
  parameter int unsigned L2TLB_SETS  = 128,
  parameter int unsigned L2TLB_WAYS  = 12,
  parameter int unsigned L2TLB_LAT   = 12
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     flush,
  input  paddr_t   cr3_base,
  input  logic     cr3_flat_en,
  // translation ports: [0] instruction, [1] data
  input  logic     req_valid [2],
  output logic     req_ready [2],
  input  vpn_t     req_vpn   [2],
  output logic     resp_valid [2],
  output logic     resp_fault [2],
  output xlat_t    resp_xlat  [2],
  // metadata (PTE) memory port
  output logic     mem_req_valid,
  input  logic     mem_req_ready,
  output paddr_t   mem_req_addr,
  input  logic     mem_rsp_valid,
  input  line_t    mem_rsp_data,
  // event pulses for performance counting
  output logic     ev_l1tlb_miss,
  output logic     ev_l2tlb_hit,
  output logic     ev_walk_done,
  output logic [2:0] ev_walk_mem_acc,
  output logic [2:0] ev_walk_pwc_hits
);
  typedef enum logic [1:0] {P_IDLE, P_LOOKUP, P_MISS} pstate_e;
  typedef enum logic [1:0] {M_IDLE, M_L2, M_WREQ, M_WALK} mstate_e;

  pstate_e pst_q [2];
  vpn_t    vpn_q [2];
  mstate_e mst_q;
  logic    cur_q;          // port served by the miss handler
  logic    rr_q;

  // ---------------- L1 TLBs ----------------
  logic  l1_req_ready [2];
  logic  l1_resp_valid[2];
  logic  l1_resp_hit  [2];
  xlat_t l1_resp_xlat [2];
  logic  l1_fill      [2];
  xlat_t fill_xlat;

  tlb_sa #(.SETS(ITLB_SETS), .WAYS(ITLB_WAYS), .LATENCY(L1TLB_LAT)) u_itlb (
    .clk, .rst_n, .flush,
    .req_valid(req_valid[0] && pst_q[0] == P_IDLE), .req_ready(l1_req_ready[0]),
    .req_vpn(req_vpn[0]),
    .resp_valid(l1_resp_valid[0]), .resp_hit(l1_resp_hit[0]), .resp_xlat(l1_resp_xlat[0]),
    .fill_valid(l1_fill[0]), .fill_vpn(vpn_q[0]), .fill_xlat(fill_xlat));

  tlb_sa #(.SETS(DTLB_SETS), .WAYS(DTLB_WAYS), .LATENCY(L1TLB_LAT)) u_dtlb (
    .clk, .rst_n, .flush,
    .req_valid(req_valid[1] && pst_q[1] == P_IDLE), .req_ready(l1_req_ready[1]),
    .req_vpn(req_vpn[1]),
    .resp_valid(l1_resp_valid[1]), .resp_hit(l1_resp_hit[1]), .resp_xlat(l1_resp_xlat[1]),
    .fill_valid(l1_fill[1]), .fill_vpn(vpn_q[1]), .fill_xlat(fill_xlat));

  // ---------------- L2 TLB ----------------
  logic  l2_req_valid, l2_req_ready, l2_resp_valid, l2_resp_hit, l2_fill;
  xlat_t l2_resp_xlat;
  vpn_t  l2_vpn;
  logic  pick;          // pending port chosen when the miss handler is idle
  assign l2_vpn = (mst_q == M_IDLE) ? vpn_q[pick] : vpn_q[cur_q];

  tlb_sa #(.SETS(L2TLB_SETS), .WAYS(L2TLB_WAYS), .LATENCY(L2TLB_LAT)) u_l2tlb (
    .clk, .rst_n, .flush,
    .req_valid(l2_req_valid), .req_ready(l2_req_ready), .req_vpn(l2_vpn),
    .resp_valid(l2_resp_valid), .resp_hit(l2_resp_hit), .resp_xlat(l2_resp_xlat),
    .fill_valid(l2_fill), .fill_vpn(vpn_q[cur_q]), .fill_xlat(fill_xlat));

  // ---------------- page table walker ----------------
  logic  w_req_valid, w_req_ready, w_resp_valid, w_resp_fault;
  xlat_t w_resp_xlat;

  ptw u_ptw (
    .clk, .rst_n, .flush, .cr3_base, .cr3_flat_en,
    .req_valid(w_req_valid), .req_ready(w_req_ready), .req_vpn(vpn_q[cur_q]),
    .resp_valid(w_resp_valid), .resp_fault(w_resp_fault), .resp_xlat(w_resp_xlat),
    .resp_mem_acc(ev_walk_mem_acc), .resp_pwc_hits(ev_walk_pwc_hits),
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_rsp_valid, .mem_rsp_data);

  // ---------------- miss handler ----------------
  logic pend [2];
  assign pend[0] = (pst_q[0] == P_MISS);
  assign pend[1] = (pst_q[1] == P_MISS);
  assign pick = (pend[0] && pend[1]) ? rr_q : pend[1];

  assign l2_req_valid = (mst_q == M_IDLE) && (pend[0] || pend[1]);
  assign w_req_valid  = (mst_q == M_WREQ);

  logic mh_done;      // miss handler answers port cur_q this cycle
  logic mh_fault;
  always_comb begin
    mh_done   = 1'b0;
    mh_fault  = 1'b0;
    fill_xlat = l2_resp_xlat;
    l2_fill   = 1'b0;
    if (mst_q == M_L2 && l2_resp_valid && l2_resp_hit) begin
      mh_done = 1'b1;
    end else if (mst_q == M_WALK && w_resp_valid) begin
      mh_done   = 1'b1;
      mh_fault  = w_resp_fault;
      fill_xlat = w_resp_xlat;
      l2_fill   = !w_resp_fault;
    end
  end

  always_comb
    for (int p = 0; p < 2; p++) begin
      l1_fill[p]    = mh_done && !mh_fault && (cur_q == 1'(p));
      req_ready[p]  = (pst_q[p] == P_IDLE) && l1_req_ready[p];
      resp_valid[p] = (pst_q[p] == P_LOOKUP && l1_resp_valid[p] && l1_resp_hit[p])
                   || (mh_done && cur_q == 1'(p));
      resp_fault[p] = (pst_q[p] == P_MISS) && mh_fault;
      resp_xlat[p]  = (pst_q[p] == P_LOOKUP) ? l1_resp_xlat[p] : fill_xlat;
    end

  assign ev_l1tlb_miss = (pst_q[0] == P_LOOKUP && l1_resp_valid[0] && !l1_resp_hit[0])
                      || (pst_q[1] == P_LOOKUP && l1_resp_valid[1] && !l1_resp_hit[1]);
  assign ev_l2tlb_hit  = (mst_q == M_L2) && l2_resp_valid && l2_resp_hit;
  assign ev_walk_done  = (mst_q == M_WALK) && w_resp_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < 2; p++) begin
        pst_q[p] <= P_IDLE;
        vpn_q[p] <= '0;
      end
      mst_q <= M_IDLE;
      cur_q <= 1'b0;
      rr_q  <= 1'b0;
    end else begin
      for (int p = 0; p < 2; p++) begin
        unique case (pst_q[p])
          P_IDLE:   if (req_valid[p] && l1_req_ready[p]) begin
            pst_q[p] <= P_LOOKUP;
            vpn_q[p] <= req_vpn[p];
          end
          P_LOOKUP: if (l1_resp_valid[p]) pst_q[p] <= l1_resp_hit[p] ? P_IDLE : P_MISS;
          P_MISS:   if (mh_done && cur_q == 1'(p)) pst_q[p] <= P_IDLE;
          default:  pst_q[p] <= P_IDLE;
        endcase
      end
      unique case (mst_q)
        M_IDLE: if (l2_req_valid && l2_req_ready) begin
          cur_q <= pick;
          rr_q  <= ~pick;
          mst_q <= M_L2;
        end
        M_L2:   if (l2_resp_valid) mst_q <= l2_resp_hit ? M_IDLE : M_WREQ;
        M_WREQ: if (w_req_ready) mst_q <= M_WALK;
        M_WALK: if (w_resp_valid) mst_q <= M_IDLE;
        default: mst_q <= M_IDLE;
      endcase
    end
  end

endmodule
