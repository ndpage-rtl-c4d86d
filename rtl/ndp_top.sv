// ndp_top: the logic layer of an NDP memory stack with NDPage address
// translation.
//
// NUM = MESH_X*MESH_Y nodes (default 2x2, the 4-core system). Each node is
// an NDP core's memory side (ndp_node: MMU with L1/L2 TLBs, page table
// walker with flattened PL2/PL1 level and page walk caches, L1 caches, and
// the metadata bypass port) next to one memory controller. Two meshes link
// the nodes: requests travel from a core to the memory controller that owns
// the physical address, responses travel back to the issuing core.
//
// Address to memory controller: physical memory is interleaved across the
// controllers in 4 KB pages, controller = PA[12+:log2(NUM)] (modulo NUM), so
// one page and one 2 MB flattened PL2/PL1 node's line are each served by a
// single controller. This mapping is this design's choice; the paper does
// not give one.
//
// The cores and the HBM2 memory controllers are not part of this RTL: each
// node's two core ports (instruction fetch, data) and each controller's
// request/response ports are top-level ports. A controller must answer every
// request with one response carrying the request's src as dst and its tag.
// cr3_base / cr3_flat_en are the control register seen by every walker
// (one address space); flush clears all TLBs, PWCs and caches.
module ndp_top
  import ndp_pkg::*;
#(
  parameter int unsigned MESH_X     = 2,
  parameter int unsigned MESH_Y     = 2,
  parameter int unsigned HOP_LAT    = 4,
  parameter int unsigned L1_SIZE_B  = 32768,
  parameter int unsigned L1_WAYS    = 8,
  parameter int unsigned L1_HIT_LAT = 4,
  parameter int unsigned L2TLB_LAT  = 12,
  localparam int unsigned NUM       = MESH_X * MESH_Y
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        flush,
  input  paddr_t      cr3_base,
  input  logic        cr3_flat_en,
  // core ports per node: [node][0] instruction fetch, [node][1] data
  input  logic        core_req_valid  [NUM][2],
  output logic        core_req_ready  [NUM][2],
  input  vaddr_t      core_req_vaddr  [NUM][2],
  input  logic        core_req_we     [NUM][2],
  input  logic [63:0] core_req_wdata  [NUM][2],
  input  logic [7:0]  core_req_wstrb  [NUM][2],
  input  logic        core_req_nc     [NUM][2],
  output logic        core_resp_valid [NUM][2],
  output logic        core_resp_fault [NUM][2],
  output logic [63:0] core_resp_rdata [NUM][2],
  // memory controller ports per node
  output logic        mc_req_valid [NUM],
  input  logic        mc_req_ready [NUM],
  output mem_req_t    mc_req       [NUM],
  input  logic        mc_rsp_valid [NUM],
  output logic        mc_rsp_ready [NUM],
  input  mem_rsp_t    mc_rsp       [NUM],
  // event pulses per node, for performance counting
  output logic        ev_l1tlb_miss    [NUM],
  output logic        ev_l2tlb_hit     [NUM],
  output logic        ev_walk_done     [NUM],
  output logic [2:0]  ev_walk_mem_acc  [NUM],
  output logic [2:0]  ev_walk_pwc_hits [NUM],
  output logic        ev_meta_req      [NUM],
  output logic        ev_l1_hit        [NUM],
  output logic        ev_l1_miss       [NUM]
);
  localparam int unsigned REQ_W = $bits(mem_req_t);
  localparam int unsigned RSP_W = $bits(mem_rsp_t);

  logic              n_req_valid [NUM];
  logic              n_req_ready [NUM];
  mem_req_t          n_req       [NUM];
  logic              n_rsp_valid [NUM];
  mem_rsp_t          n_rsp       [NUM];

  logic [NODE_W-1:0] rq_dst  [NUM];
  logic [REQ_W-1:0]  rq_data [NUM];
  logic [REQ_W-1:0]  rq_ej   [NUM];
  logic [NODE_W-1:0] rs_dst  [NUM];
  logic [RSP_W-1:0]  rs_data [NUM];
  logic [RSP_W-1:0]  rs_ej   [NUM];
  logic              rs_ej_ready [NUM];

  for (genvar n = 0; n < NUM; n++) begin : g_node
    ndp_node #(.NODE_ID(n), .L1_SIZE_B(L1_SIZE_B), .L1_WAYS(L1_WAYS),
               .L1_HIT_LAT(L1_HIT_LAT), .L2TLB_LAT(L2TLB_LAT)) u_node (
      .clk, .rst_n, .flush, .cr3_base, .cr3_flat_en,
      .core_req_valid(core_req_valid[n]), .core_req_ready(core_req_ready[n]),
      .core_req_vaddr(core_req_vaddr[n]), .core_req_we(core_req_we[n]),
      .core_req_wdata(core_req_wdata[n]), .core_req_wstrb(core_req_wstrb[n]),
      .core_req_nc(core_req_nc[n]),
      .core_resp_valid(core_resp_valid[n]), .core_resp_fault(core_resp_fault[n]),
      .core_resp_rdata(core_resp_rdata[n]),
      .mem_req_valid(n_req_valid[n]), .mem_req_ready(n_req_ready[n]), .mem_req(n_req[n]),
      .mem_rsp_valid(n_rsp_valid[n]), .mem_rsp(n_rsp[n]),
      .ev_l1tlb_miss(ev_l1tlb_miss[n]), .ev_l2tlb_hit(ev_l2tlb_hit[n]),
      .ev_walk_done(ev_walk_done[n]), .ev_walk_mem_acc(ev_walk_mem_acc[n]),
      .ev_walk_pwc_hits(ev_walk_pwc_hits[n]), .ev_meta_req(ev_meta_req[n]),
      .ev_l1_hit(ev_l1_hit[n]), .ev_l1_miss(ev_l1_miss[n]));

    // home memory controller of the requested line
    assign rq_dst[n]  = NODE_W'((32'(n_req[n].addr) >> PAGE_OFF) % NUM);
    assign rq_data[n] = n_req[n];
    assign mc_req[n]  = mem_req_t'(rq_ej[n]);

    assign rs_dst[n]  = mc_rsp[n].dst;
    assign rs_data[n] = mc_rsp[n];
    assign n_rsp[n]   = mem_rsp_t'(rs_ej[n]);
    assign rs_ej_ready[n] = 1'b1;       // a node always takes its responses
  end

  // request network: cores -> memory controllers
  mesh_noc #(.PW(REQ_W), .MESH_X(MESH_X), .MESH_Y(MESH_Y), .HOP_LAT(HOP_LAT)) u_req_net (
    .clk, .rst_n,
    .inj_valid(n_req_valid), .inj_ready(n_req_ready), .inj_dst(rq_dst), .inj_data(rq_data),
    .ej_valid(mc_req_valid), .ej_ready(mc_req_ready), .ej_data(rq_ej));

  // response network: memory controllers -> cores
  mesh_noc #(.PW(RSP_W), .MESH_X(MESH_X), .MESH_Y(MESH_Y), .HOP_LAT(HOP_LAT)) u_rsp_net (
    .clk, .rst_n,
    .inj_valid(mc_rsp_valid), .inj_ready(mc_rsp_ready), .inj_dst(rs_dst), .inj_data(rs_data),
    .ej_valid(n_rsp_valid), .ej_ready(rs_ej_ready), .ej_data(rs_ej));

endmodule
