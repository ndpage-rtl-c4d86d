// tlb_sa: set-associative TLB used for the L1 instruction TLB, the L1 data
// TLB and the shared L2 TLB of an NDP core's MMU.
//
// It maps a 36-bit virtual page number to a physical frame number plus a
// writable bit. The set is picked by the low bits of the VPN and the rest of
// the VPN is the tag. A lookup accepted on cycle t answers on cycle
// t+LATENCY with resp_hit/resp_xlat; the tag compare is done on the last
// cycle against the arrays as they are then. A new lookup may be accepted on
// the same cycle a response is given, so an L1 TLB (LATENCY=1) answers one
// lookup per cycle and the L2 TLB (LATENCY=12) is blocking.
//
// Fills (from a completed walk or from the L2 TLB) write an invalid way of the
// set if there is one, otherwise the way named by a per-set round-robin
// pointer. A refill of a VPN already present overwrites that way. flush
// invalidates every entry in one cycle.
//
// Sizes (entries, ways, latency) are the paper's simulation configuration;
// the L2 TLB's associativity, the replacement policy and the flush input are
// this design's choices.
module tlb_sa
  import ndp_pkg::*;
#(
  parameter int unsigned SETS    = 16,
  parameter int unsigned WAYS    = 4,
  parameter int unsigned LATENCY = 1
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   flush,
  // lookup
  input  logic   req_valid,
  output logic   req_ready,
  input  vpn_t   req_vpn,
  output logic   resp_valid,
  output logic   resp_hit,
  output xlat_t  resp_xlat,
  // fill
  input  logic   fill_valid,
  input  vpn_t   fill_vpn,
  input  xlat_t  fill_xlat
);
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned CNT_W = $clog2(LATENCY + 1);

  typedef logic [VPN_W-1:0] tag_t;   // full VPN kept as tag for simplicity of compare

  logic              valid_q [SETS][WAYS];
  tag_t              tag_q   [SETS][WAYS];
  xlat_t             data_q  [SETS][WAYS];
  logic [WAY_W-1:0]  rr_q    [SETS];

  logic              busy_q;
  logic [CNT_W-1:0]  cnt_q;
  vpn_t              vpn_q;

  function automatic logic [SET_W-1:0] set_of(input vpn_t v);
    return (SETS > 1) ? v[SET_W-1:0] : '0;
  endfunction

  // ---------------- lookup timing ----------------
  assign resp_valid = busy_q && (cnt_q == CNT_W'(LATENCY - 1));
  assign req_ready  = !busy_q || resp_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      cnt_q  <= '0;
      vpn_q  <= '0;
    end else begin
      if (req_valid && req_ready) begin
        busy_q <= 1'b1;
        cnt_q  <= '0;
        vpn_q  <= req_vpn;
      end else if (resp_valid) begin
        busy_q <= 1'b0;
      end else if (busy_q) begin
        cnt_q <= cnt_q + 1'b1;
      end
    end
  end

  // ---------------- tag compare ----------------
  always_comb begin
    resp_hit  = 1'b0;
    resp_xlat = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (valid_q[set_of(vpn_q)][w] && tag_q[set_of(vpn_q)][w] == vpn_q) begin
        resp_hit  = 1'b1;
        resp_xlat = data_q[set_of(vpn_q)][w];
      end
    end
  end

  // ---------------- fill ----------------
  logic [WAY_W-1:0] fill_way;
  logic             fill_found;
  always_comb begin
    fill_found = 1'b0;
    fill_way   = rr_q[set_of(fill_vpn)];
    // an existing copy is overwritten, else the first invalid way
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (!valid_q[set_of(fill_vpn)][w]) fill_way = WAY_W'(w);
    end
    for (int w = 0; w < WAYS; w++) begin
      if (valid_q[set_of(fill_vpn)][w] && tag_q[set_of(fill_vpn)][w] == fill_vpn) begin
        fill_way   = WAY_W'(w);
        fill_found = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        rr_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) begin
          valid_q[s][w] <= 1'b0;
          tag_q[s][w]   <= '0;
          data_q[s][w]  <= '0;
        end
      end
    end else if (flush) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++)
          valid_q[s][w] <= 1'b0;
    end else if (fill_valid) begin
      valid_q[set_of(fill_vpn)][fill_way] <= 1'b1;
      tag_q[set_of(fill_vpn)][fill_way]   <= fill_vpn;
      data_q[set_of(fill_vpn)][fill_way]  <= fill_xlat;
      if (!fill_found && fill_way == rr_q[set_of(fill_vpn)])
        rr_q[set_of(fill_vpn)] <= (rr_q[set_of(fill_vpn)] == WAY_W'(WAYS - 1)) ? '0
                                  : rr_q[set_of(fill_vpn)] + 1'b1;
    end
  end

endmodule
