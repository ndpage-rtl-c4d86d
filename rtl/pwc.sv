// pwc: fully associative page walk cache for one page-table level.
//
// The walker keeps one PWC per level it walks (Fig. 10 of the design: L4 PWC,
// L3 PWC and a PWC for the flattened PL2/PL1 level). Each entry is keyed by
// the virtual-address bits that select the entry from the root down to that
// level: VA[47:39] for PL4 (9 bits), VA[47:30] for PL3 (18 bits) and
// VA[47:12] for the flattened PL2/PL1 level (36 bits), and holds the 64-bit
// PTE read from memory at that level.
//
// Lookup is combinational: lookup_key in, lookup_hit/lookup_pte out in the
// same cycle; the walker spends one cycle per level on it. A fill writes a
// way whose key already matches, else an invalid way, else the way named by a
// round-robin pointer. flush clears all entries.
//
// The number of entries, the lookup timing and the replacement policy are
// this design's choices; the paper gives the per-level organisation only.
module pwc
  import ndp_pkg::*;
#(
  parameter int unsigned KEY_W   = 9,
  parameter int unsigned ENTRIES = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             flush,
  input  logic [KEY_W-1:0] lookup_key,
  output logic             lookup_hit,
  output pte_t             lookup_pte,
  input  logic             fill_valid,
  input  logic [KEY_W-1:0] fill_key,
  input  pte_t             fill_pte
);
  localparam int unsigned IDX_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic             valid_q [ENTRIES];
  logic [KEY_W-1:0] key_q   [ENTRIES];
  pte_t             pte_q   [ENTRIES];
  logic [IDX_W-1:0] rr_q;

  always_comb begin
    lookup_hit = 1'b0;
    lookup_pte = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && key_q[i] == lookup_key) begin
        lookup_hit = 1'b1;
        lookup_pte = pte_q[i];
      end
    end
  end

  logic [IDX_W-1:0] victim;
  logic             use_rr;
  always_comb begin
    victim = rr_q;
    use_rr = 1'b1;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (!valid_q[i]) begin
        victim = IDX_W'(i);
        use_rr = 1'b0;
      end
    end
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && key_q[i] == fill_key) begin
        victim = IDX_W'(i);
        use_rr = 1'b0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_q <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        valid_q[i] <= 1'b0;
        key_q[i]   <= '0;
        pte_q[i]   <= '0;
      end
    end else if (flush) begin
      for (int i = 0; i < ENTRIES; i++) valid_q[i] <= 1'b0;
    end else if (fill_valid) begin
      valid_q[victim] <= 1'b1;
      key_q[victim]   <= fill_key;
      pte_q[victim]   <= fill_pte;
      if (use_rr) rr_q <= (rr_q == IDX_W'(ENTRIES - 1)) ? '0 : rr_q + 1'b1;
    end
  end

endmodule
