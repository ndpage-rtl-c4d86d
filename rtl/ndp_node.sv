// ndp_node: the memory side of one NDP core: its MMU, L1 instruction and
// data caches, and the node memory port with the metadata bypass.
//
// The core (not part of this RTL) issues virtual-address accesses on two
// ports: instruction fetch (64-bit reads) and data (64-bit loads/stores with
// byte strobes, plus an nc flag for the special non-cacheable load used for
// page-table entries). For each access the node
//   1. translates the page number in the MMU (L1 TLB, L2 TLB, page walk),
//   2. forms the physical address from the frame number and VA[11:0],
//   3. accesses the L1 cache of that port with it, which on a miss reads
//      main memory through the node memory port.
// The page walker's PTE reads enter the node memory port directly, next to
// the two caches' traffic, so metadata never goes through an L1 cache.
// A translation fault (not-present PTE, or a store to a read-only page) is
// answered with resp_fault and no memory access.
//
// Each port handles one access at a time: ready is high only when the port
// is idle, and one resp_valid cycle ends the access.
//
// The order translate-then-access follows the paper's Fig. 11; the blocking
// ports and the write-protection check are this design's choices.
module ndp_node
  import ndp_pkg::*;
#(
  parameter int unsigned NODE_ID    = 0,
  parameter int unsigned L1_SIZE_B  = 32768,
  parameter int unsigned L1_WAYS    = 8,
  parameter int unsigned L1_HIT_LAT = 4,
  parameter int unsigned L2TLB_LAT  = 12
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        flush,
  input  paddr_t      cr3_base,
  input  logic        cr3_flat_en,
  // core ports: [0] instruction fetch, [1] data
  input  logic        core_req_valid [2],
  output logic        core_req_ready [2],
  input  vaddr_t      core_req_vaddr [2],
  input  logic        core_req_we    [2],
  input  logic [63:0] core_req_wdata [2],
  input  logic [7:0]  core_req_wstrb [2],
  input  logic        core_req_nc    [2],
  output logic        core_resp_valid [2],
  output logic        core_resp_fault [2],
  output logic [63:0] core_resp_rdata [2],
  // node memory port (towards the mesh)
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output mem_req_t    mem_req,
  input  logic        mem_rsp_valid,
  input  mem_rsp_t    mem_rsp,
  // events
  output logic        ev_l1tlb_miss,
  output logic        ev_l2tlb_hit,
  output logic        ev_walk_done,
  output logic [2:0]  ev_walk_mem_acc,
  output logic [2:0]  ev_walk_pwc_hits,
  output logic        ev_meta_req,
  output logic        ev_l1_hit,
  output logic        ev_l1_miss
);
  typedef enum logic [1:0] {N_IDLE, N_XLAT, N_CREQ, N_CWAIT} nstate_e;

  nstate_e     st_q   [2];
  vaddr_t      va_q   [2];
  logic        we_q   [2];
  logic [63:0] wd_q   [2];
  logic [7:0]  ws_q   [2];
  logic        nc_q   [2];
  paddr_t      pa_q   [2];

  // ---------------- MMU ----------------
  logic  m_req_valid [2], m_req_ready [2], m_resp_valid [2], m_resp_fault [2];
  vpn_t  m_req_vpn [2];
  xlat_t m_resp_xlat [2];
  logic  w_mem_valid, w_mem_ready, w_rsp_valid;
  paddr_t w_mem_addr;
  line_t rsp_line;

  always_comb
    for (int p = 0; p < 2; p++) begin
      m_req_valid[p] = core_req_valid[p] && st_q[p] == N_IDLE;
      m_req_vpn[p]   = core_req_vaddr[p][VA_W-1:PAGE_OFF];
    end

  mmu #(.L2TLB_LAT(L2TLB_LAT)) u_mmu (
    .clk, .rst_n, .flush, .cr3_base, .cr3_flat_en,
    .req_valid(m_req_valid), .req_ready(m_req_ready), .req_vpn(m_req_vpn),
    .resp_valid(m_resp_valid), .resp_fault(m_resp_fault), .resp_xlat(m_resp_xlat),
    .mem_req_valid(w_mem_valid), .mem_req_ready(w_mem_ready), .mem_req_addr(w_mem_addr),
    .mem_rsp_valid(w_rsp_valid), .mem_rsp_data(rsp_line),
    .ev_l1tlb_miss, .ev_l2tlb_hit, .ev_walk_done, .ev_walk_mem_acc, .ev_walk_pwc_hits);

  // ---------------- L1 caches ----------------
  logic        c_req_valid [2], c_req_ready [2], c_resp_valid [2], c_resp_hit [2];
  logic [63:0] c_resp_rdata [2];
  logic        a_valid [3], a_ready [3], a_we [3], a_rsp [3];
  paddr_t      a_addr [3];
  line_t       a_wdata [3];
  logic [LINE_B-1:0] a_wstrb [3];

  for (genvar p = 0; p < 2; p++) begin : g_l1
    assign c_req_valid[p] = (st_q[p] == N_CREQ);
    l1_cache #(.SIZE_B(L1_SIZE_B), .WAYS(L1_WAYS), .HIT_LAT(L1_HIT_LAT)) u_l1 (
      .clk, .rst_n, .flush,
      .req_valid(c_req_valid[p]), .req_ready(c_req_ready[p]), .req_addr(pa_q[p]),
      .req_we(we_q[p]), .req_wdata(wd_q[p]), .req_wstrb(ws_q[p]), .req_nc(nc_q[p]),
      .resp_valid(c_resp_valid[p]), .resp_rdata(c_resp_rdata[p]), .resp_hit(c_resp_hit[p]),
      .mem_req_valid(a_valid[p]), .mem_req_ready(a_ready[p]), .mem_req_we(a_we[p]),
      .mem_req_addr(a_addr[p]), .mem_req_wdata(a_wdata[p]), .mem_req_wstrb(a_wstrb[p]),
      .mem_rsp_valid(a_rsp[p]), .mem_rsp_data(rsp_line));
  end

  // walker (metadata) requests: read-only, bypassing the L1 caches
  assign a_valid[2] = w_mem_valid;
  assign a_we[2]    = 1'b0;
  assign a_addr[2]  = w_mem_addr;
  assign a_wdata[2] = '0;
  assign a_wstrb[2] = '0;
  assign w_mem_ready = a_ready[2];
  assign w_rsp_valid = a_rsp[2];

  node_mem_arb #(.NODE_ID(NODE_ID)) u_arb (
    .clk, .rst_n,
    .req_valid(a_valid), .req_ready(a_ready), .req_we(a_we), .req_addr(a_addr),
    .req_wdata(a_wdata), .req_wstrb(a_wstrb), .rsp_valid(a_rsp), .rsp_data(rsp_line),
    .out_valid(mem_req_valid), .out_ready(mem_req_ready), .out_req(mem_req),
    .in_rsp_valid(mem_rsp_valid), .in_rsp(mem_rsp), .meta_fire(ev_meta_req));

  // ---------------- per-port sequencing ----------------
  logic xl_fault [2];
  always_comb
    for (int p = 0; p < 2; p++) begin
      xl_fault[p]        = m_resp_fault[p] || (we_q[p] && !m_resp_xlat[p].writable);
      core_req_ready[p]  = (st_q[p] == N_IDLE) && m_req_ready[p];
      core_resp_valid[p] = (st_q[p] == N_XLAT && m_resp_valid[p] && xl_fault[p])
                        || (st_q[p] == N_CWAIT && c_resp_valid[p]);
      core_resp_fault[p] = (st_q[p] == N_XLAT);
      core_resp_rdata[p] = c_resp_rdata[p];
    end

  assign ev_l1_hit  = (st_q[0] == N_CWAIT && c_resp_valid[0] && c_resp_hit[0])
                   || (st_q[1] == N_CWAIT && c_resp_valid[1] && c_resp_hit[1]);
  assign ev_l1_miss = (st_q[0] == N_CWAIT && c_resp_valid[0] && !c_resp_hit[0])
                   || (st_q[1] == N_CWAIT && c_resp_valid[1] && !c_resp_hit[1] && !we_q[1]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < 2; p++) begin
        st_q[p] <= N_IDLE;
        va_q[p] <= '0;
        we_q[p] <= 1'b0;
        wd_q[p] <= '0;
        ws_q[p] <= '0;
        nc_q[p] <= 1'b0;
        pa_q[p] <= '0;
      end
    end else begin
      for (int p = 0; p < 2; p++) begin
        unique case (st_q[p])
          N_IDLE: if (core_req_valid[p] && m_req_ready[p]) begin
            st_q[p] <= N_XLAT;
            va_q[p] <= core_req_vaddr[p];
            we_q[p] <= core_req_we[p] && (p == 1);
            wd_q[p] <= core_req_wdata[p];
            ws_q[p] <= core_req_wstrb[p];
            nc_q[p] <= core_req_nc[p];
          end
          N_XLAT: if (m_resp_valid[p]) begin
            pa_q[p] <= {m_resp_xlat[p].pfn, va_q[p][PAGE_OFF-1:0]};
            st_q[p] <= xl_fault[p] ? N_IDLE : N_CREQ;
          end
          N_CREQ:  if (c_req_ready[p]) st_q[p] <= N_CWAIT;
          N_CWAIT: if (c_resp_valid[p]) st_q[p] <= N_IDLE;
          default: st_q[p] <= N_IDLE;
        endcase
      end
    end
  end

endmodule
