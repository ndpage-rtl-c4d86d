// ptw: hardware page table walker of an NDP core, with NDPage's flattened
// PL2/PL1 level, its three page walk caches and metadata (PTE) fetches that
// bypass the L1 cache.
//
// A walk starts from the PL4 table whose base is in CR3 and indexes it with
// VA[47:39], then the PL3 table with VA[38:30]. If the PL3 entry has the
// flattened-node bit set (PTE bit 9) and flattening is enabled in the control
// register (cr3_flat_en), the next node is one 2 MB flattened PL2/PL1 table
// indexed with the 18 bits VA[29:12], and that entry is the leaf: three
// sequential table accesses per walk. Otherwise the walker falls back to the
// conventional PL2 (VA[29:21]) and PL1 (VA[20:12]) tables, four accesses.
//
// At every level the walker first looks up that level's PWC (one cycle).
// On a miss it issues a line read to memory on its own port, which the node
// sends straight to main memory without touching the L1 cache: this is the
// metadata cache bypass. The returned line's 64-bit word is the PTE; it is
// written into the level's PWC. A PTE without the present bit ends the walk
// with resp_fault. The conventional PL2 level has no PWC here; the leaf of
// either layout is cached in the L2/L1 PWC keyed by the full VPN.
//
// Interface: one walk at a time (req_valid/req_ready, then a single-cycle
// resp_valid). resp_mem_acc reports how many PTE reads went to memory and
// resp_pwc_hits how many levels hit in a PWC, for performance counting.
// Memory port: valid/ready request, response returned on mem_rsp_valid.
//
// Follows the paper: level split, 18-bit flattened index, per-level PWCs,
// PWC-then-memory order, bypass of L1. This design's choices: flat bit at
// PTE bit 9, PWC sizes and single-cycle lookup, x86-64 present/writable bits,
// 4 KB pages only (no huge-page leaf).
module ptw
  import ndp_pkg::*;
#(
  parameter int unsigned PWC4_ENTRIES  = 16,
  parameter int unsigned PWC3_ENTRIES  = 16,
  parameter int unsigned PWC21_ENTRIES = 32
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     flush,
  input  paddr_t   cr3_base,
  input  logic     cr3_flat_en,
  // walk request / response
  input  logic     req_valid,
  output logic     req_ready,
  input  vpn_t     req_vpn,
  output logic     resp_valid,
  output logic     resp_fault,
  output xlat_t    resp_xlat,
  output logic [2:0] resp_mem_acc,
  output logic [2:0] resp_pwc_hits,
  // metadata memory port (bypasses L1)
  output logic     mem_req_valid,
  input  logic     mem_req_ready,
  output paddr_t   mem_req_addr,
  input  logic     mem_rsp_valid,
  input  line_t    mem_rsp_data
);
  typedef enum logic [2:0] {LV4, LV3, LV2, LV1, LV21} level_e;
  typedef enum logic [2:0] {S_IDLE, S_PWC, S_MREQ, S_MRSP, S_NEXT, S_DONE} state_e;

  state_e  state_q;
  level_e  level_q;
  vpn_t    vpn_q;
  paddr_t  base_q;
  pte_t    pte_q;
  logic    fault_q;
  logic [2:0] macc_q, phit_q;

  // ---------------- index for the current level ----------------
  logic [17:0] idx;
  always_comb begin
    unique case (level_q)
      LV4:     idx = {9'd0, vpn_q[35:27]};
      LV3:     idx = {9'd0, vpn_q[26:18]};
      LV2:     idx = {9'd0, vpn_q[17:9]};
      LV1:     idx = {9'd0, vpn_q[8:0]};
      default: idx = vpn_q[17:0];             // flattened PL2/PL1: VA[29:12]
    endcase
  end
  paddr_t pte_addr;
  assign pte_addr = base_q + PA_W'({idx, 3'b000});

  // ---------------- page walk caches ----------------
  logic pwc4_hit, pwc3_hit, pwc21_hit;
  pte_t pwc4_pte, pwc3_pte, pwc21_pte;
  logic fill_now;
  assign fill_now = (state_q == S_MRSP) && mem_rsp_valid;
  pte_t mem_pte;
  assign mem_pte = mem_rsp_data[pte_addr[5:3]*64 +: 64];

  pwc #(.KEY_W(9), .ENTRIES(PWC4_ENTRIES)) u_pwc4 (
    .clk, .rst_n, .flush,
    .lookup_key(vpn_q[35:27]), .lookup_hit(pwc4_hit), .lookup_pte(pwc4_pte),
    .fill_valid(fill_now && level_q == LV4 && mem_pte[PTE_P]),
    .fill_key(vpn_q[35:27]), .fill_pte(mem_pte));

  pwc #(.KEY_W(18), .ENTRIES(PWC3_ENTRIES)) u_pwc3 (
    .clk, .rst_n, .flush,
    .lookup_key(vpn_q[35:18]), .lookup_hit(pwc3_hit), .lookup_pte(pwc3_pte),
    .fill_valid(fill_now && level_q == LV3 && mem_pte[PTE_P]),
    .fill_key(vpn_q[35:18]), .fill_pte(mem_pte));

  pwc #(.KEY_W(36), .ENTRIES(PWC21_ENTRIES)) u_pwc21 (
    .clk, .rst_n, .flush,
    .lookup_key(vpn_q), .lookup_hit(pwc21_hit), .lookup_pte(pwc21_pte),
    .fill_valid(fill_now && (level_q == LV21 || level_q == LV1) && mem_pte[PTE_P]),
    .fill_key(vpn_q), .fill_pte(mem_pte));

  logic pwc_hit;
  pte_t pwc_pte;
  always_comb begin
    unique case (level_q)
      LV4:       begin pwc_hit = pwc4_hit;  pwc_pte = pwc4_pte;  end
      LV3:       begin pwc_hit = pwc3_hit;  pwc_pte = pwc3_pte;  end
      LV2:       begin pwc_hit = 1'b0;      pwc_pte = '0;        end
      default:   begin pwc_hit = pwc21_hit; pwc_pte = pwc21_pte; end
    endcase
  end

  // ---------------- walk FSM ----------------
  assign req_ready     = (state_q == S_IDLE);
  assign mem_req_valid = (state_q == S_MREQ);
  assign mem_req_addr  = {pte_addr[PA_W-1:6], 6'd0};
  assign resp_valid    = (state_q == S_DONE);
  assign resp_fault    = fault_q;
  assign resp_xlat     = '{pfn: pte_q[PA_W-1:PAGE_OFF], writable: pte_q[PTE_RW]};
  assign resp_mem_acc  = macc_q;
  assign resp_pwc_hits = phit_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      level_q <= LV4;
      vpn_q   <= '0;
      base_q  <= '0;
      pte_q   <= '0;
      fault_q <= 1'b0;
      macc_q  <= '0;
      phit_q  <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (req_valid) begin
          vpn_q   <= req_vpn;
          base_q  <= cr3_base;
          level_q <= LV4;
          fault_q <= 1'b0;
          macc_q  <= '0;
          phit_q  <= '0;
          state_q <= S_PWC;
        end
        S_PWC: begin
          if (pwc_hit) begin
            pte_q   <= pwc_pte;
            phit_q  <= phit_q + 1'b1;
            state_q <= S_NEXT;
          end else begin
            state_q <= S_MREQ;
          end
        end
        S_MREQ: if (mem_req_ready) state_q <= S_MRSP;
        S_MRSP: if (mem_rsp_valid) begin
          pte_q   <= mem_pte;
          macc_q  <= macc_q + 1'b1;
          state_q <= S_NEXT;
        end
        S_NEXT: begin
          if (!pte_q[PTE_P]) begin
            fault_q <= 1'b1;
            state_q <= S_DONE;
          end else begin
            base_q <= pte_base(pte_q);
            unique case (level_q)
              LV4: begin level_q <= LV3; state_q <= S_PWC; end
              LV3: begin
                level_q <= (cr3_flat_en && pte_q[PTE_FLAT]) ? LV21 : LV2;
                state_q <= S_PWC;
              end
              LV2: begin level_q <= LV1; state_q <= S_PWC; end
              default: state_q <= S_DONE;      // LV1 or LV21: leaf reached
            endcase
          end
        end
        S_DONE: state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // a PTE read must not be withdrawn before it is accepted
  a_mreq_hold: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_addr));

endmodule
