// node_mem_arb: the memory port of one NDP core node. It merges the three
// requesters of the node into the single request stream that leaves for the
// mesh, and steers responses back by tag.
//
// Requesters: the L1 instruction cache (tag 0), the L1 data cache (tag 1)
// and the page table walker (tag 2). The walker's PTE reads arrive here
// directly, never passing through an L1 cache: this is the metadata bypass
// path of the design, so PTEs go straight to main memory and cannot evict
// normal data. Each requester has at most one request outstanding.
//
// Arbitration is round-robin among the requesters that are valid; a grant is
// held until the request is accepted downstream, so a request never changes
// while it waits. The outgoing request carries the node number and the tag;
// a response is delivered to the requester named by its tag in the same
// cycle it arrives (rsp_valid is one-hot by tag). meta_fire pulses when a
// PTE read is sent, for event counting. rsp_data is the response line wired
// straight through to all three requesters (only the one with rsp_valid
// takes it), and out_req.src is the constant NODE_ID: both are intended.
//
// The paper gives the bypass itself; the port structure, tags and round-robin
// arbitration are this design's choices.
module node_mem_arb
  import ndp_pkg::*;
#(
  parameter int unsigned NODE_ID = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  // requesters: index = tag (0 L1I, 1 L1D, 2 PTW)
  input  logic        req_valid [3],
  output logic        req_ready [3],
  input  logic        req_we    [3],
  input  paddr_t      req_addr  [3],
  input  line_t       req_wdata [3],
  input  logic [LINE_B-1:0] req_wstrb [3],
  output logic        rsp_valid [3],
  output line_t       rsp_data,
  // towards the mesh
  output logic        out_valid,
  input  logic        out_ready,
  output mem_req_t    out_req,
  input  logic        in_rsp_valid,
  input  mem_rsp_t    in_rsp,
  output logic        meta_fire
);
  logic [1:0] rr_q;      // requester with priority
  logic [1:0] lock_q;    // granted requester while held
  logic       held_q;
  logic [1:0] gnt;
  logic       any;

  logic [1:0] cand;
  always_comb begin
    gnt  = lock_q;
    any  = held_q;
    cand = '0;
    if (!held_q) begin
      // search from rr_q onwards; the lowest distance from rr_q wins
      for (int k = 2; k >= 0; k--) begin
        cand = 2'((32'(rr_q) + 32'(k)) % 3);
        if (req_valid[cand]) begin
          gnt = cand;
          any = 1'b1;
        end
      end
    end
  end

  assign out_valid     = any;
  assign out_req.src   = NODE_W'(NODE_ID);
  assign out_req.tag   = TAG_W'(gnt);
  assign out_req.we    = req_we[gnt];
  assign out_req.addr  = req_addr[gnt];
  assign out_req.wdata = req_wdata[gnt];
  assign out_req.wstrb = req_wstrb[gnt];
  assign meta_fire     = out_valid && out_ready && (gnt == SRC_PTW);

  always_comb
    for (int i = 0; i < 3; i++) begin
      req_ready[i] = out_ready && any && (gnt == 2'(i));
      rsp_valid[i] = in_rsp_valid && (in_rsp.tag == TAG_W'(i));
    end
  assign rsp_data = in_rsp.rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_q   <= '0;
      lock_q <= '0;
      held_q <= 1'b0;
    end else if (any) begin
      if (out_ready) begin
        held_q <= 1'b0;
        rr_q   <= (gnt == 2'd2) ? 2'd0 : gnt + 2'd1;
      end else begin
        held_q <= 1'b1;
        lock_q <= gnt;
      end
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_req));

endmodule
