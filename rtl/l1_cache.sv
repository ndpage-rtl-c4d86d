// l1_cache: the single level of cache of an NDP core (used for both the L1
// instruction and the L1 data cache), with a non-cacheable path for
// metadata loads.
//
// Organisation: SIZE_B bytes, WAYS-way set associative, 64-byte lines
// (defaults 32 KB, 8 ways, 64 sets). A cacheable access accepted on cycle t
// finds its tag on cycle t+HIT_LAT (default 4); a load hit answers on that
// cycle. A load miss reads the line from memory, fills a way (first invalid,
// else round-robin) and answers when the line arrives.
//
// Stores are write-through and do not allocate: a store updates the line if
// it hits and is always sent to memory as a line write with a byte strobe;
// it is acknowledged when memory answers. Write-through keeps memory current,
// so page-table entries written by the OS with ordinary stores are seen by the
// page walker, whose PTE reads never look in this cache.
//
// A load with req_nc set (the special load the OS uses for page-table
// entries) is the cache-bypass mechanism: it skips the tag lookup, goes to
// memory at once, returns the word and allocates nothing, so metadata never
// evicts normal data.
//
// Interface: one access at a time (req_valid/req_ready, a single-cycle
// resp_valid with resp_rdata, resp_hit says whether it was served from the
// cache). Memory side: valid/ready line request, response on mem_rsp_valid.
//
// Size, associativity and hit latency follow the paper's configuration; the
// write policy, replacement and blocking operation are this design's choices.
module l1_cache
  import ndp_pkg::*;
#(
  parameter int unsigned SIZE_B  = 32768,
  parameter int unsigned WAYS    = 8,
  parameter int unsigned HIT_LAT = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        flush,
  // core side (physical addresses)
  input  logic        req_valid,
  output logic        req_ready,
  input  paddr_t      req_addr,
  input  logic        req_we,
  input  logic [63:0] req_wdata,
  input  logic [7:0]  req_wstrb,
  input  logic        req_nc,
  output logic        resp_valid,
  output logic [63:0] resp_rdata,
  output logic        resp_hit,
  // memory side
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output logic        mem_req_we,
  output paddr_t      mem_req_addr,
  output line_t       mem_req_wdata,
  output logic [LINE_B-1:0] mem_req_wstrb,
  input  logic        mem_rsp_valid,
  input  line_t       mem_rsp_data
);
  localparam int unsigned SETS  = SIZE_B / (LINE_B * WAYS);
  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAGB  = PA_W - SET_W - 6;
  localparam int unsigned CNT_W = $clog2(HIT_LAT + 1);

  typedef enum logic [2:0] {S_IDLE, S_TAG, S_MREQ, S_MRSP} state_e;

  logic             valid_q [SETS][WAYS];
  logic [TAGB-1:0]  tag_q   [SETS][WAYS];
  line_t            data_q  [SETS][WAYS];
  logic [WAY_W-1:0] rr_q    [SETS];

  state_e           state_q;
  logic [CNT_W-1:0] cnt_q;
  paddr_t           addr_q;
  logic             we_q, nc_q;
  logic [63:0]      wdata_q;
  logic [7:0]       wstrb_q;

  logic [SET_W-1:0] set_idx;
  logic [TAGB-1:0]  tag_in;
  logic [2:0]       word;
  assign set_idx = addr_q[6 +: SET_W];
  assign tag_in  = addr_q[PA_W-1 -: TAGB];
  assign word    = addr_q[5:3];

  // ---------------- tag compare ----------------
  logic             hit;
  logic [WAY_W-1:0] hit_way;
  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (valid_q[set_idx][w] && tag_q[set_idx][w] == tag_in) begin
        hit     = 1'b1;
        hit_way = WAY_W'(w);
      end
    end
  end

  logic [WAY_W-1:0] victim;
  always_comb begin
    victim = rr_q[set_idx];
    for (int w = WAYS - 1; w >= 0; w--)
      if (!valid_q[set_idx][w]) victim = WAY_W'(w);
  end

  logic decide;
  assign decide = (state_q == S_TAG) && (cnt_q == CNT_W'(HIT_LAT - 1));

  // store data placed into a line with its byte strobe
  line_t             st_line;
  logic [LINE_B-1:0] st_strb;
  always_comb begin
    st_line = '0;
    st_strb = '0;
    st_line[word*64 +: 64] = wdata_q;
    st_strb[word*8 +: 8]   = wstrb_q;
  end

  // ---------------- outputs ----------------
  assign req_ready     = (state_q == S_IDLE);
  assign mem_req_valid = (state_q == S_MREQ);
  assign mem_req_we    = we_q;
  assign mem_req_addr  = we_q ? addr_q : {addr_q[PA_W-1:6], 6'd0};
  assign mem_req_wdata = st_line;
  assign mem_req_wstrb = st_strb;

  always_comb begin
    resp_valid = 1'b0;
    resp_rdata = '0;
    resp_hit   = 1'b0;
    if (decide && hit && !we_q) begin
      resp_valid = 1'b1;
      resp_hit   = 1'b1;
      resp_rdata = data_q[set_idx][hit_way][word*64 +: 64];
    end else if (state_q == S_MRSP && mem_rsp_valid) begin
      resp_valid = 1'b1;
      resp_rdata = we_q ? 64'd0 : mem_rsp_data[word*64 +: 64];
    end
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      cnt_q   <= '0;
      addr_q  <= '0;
      we_q    <= 1'b0;
      nc_q    <= 1'b0;
      wdata_q <= '0;
      wstrb_q <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (req_valid) begin
          addr_q  <= req_addr;
          we_q    <= req_we;
          nc_q    <= req_nc && !req_we;
          wdata_q <= req_wdata;
          wstrb_q <= req_wstrb;
          cnt_q   <= '0;
          // a non-cacheable load goes to memory at once
          state_q <= (req_nc && !req_we) ? S_MREQ : S_TAG;
        end
        S_TAG: begin
          if (decide) state_q <= (hit && !we_q) ? S_IDLE : S_MREQ;
          else        cnt_q   <= cnt_q + 1'b1;
        end
        S_MREQ: if (mem_req_ready) state_q <= S_MRSP;
        S_MRSP: if (mem_rsp_valid) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // ---------------- arrays ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        rr_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) begin
          valid_q[s][w] <= 1'b0;
          tag_q[s][w]   <= '0;
        end
      end
    end else if (flush) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) valid_q[s][w] <= 1'b0;
    end else if (state_q == S_MRSP && mem_rsp_valid && !we_q && !nc_q) begin
      valid_q[set_idx][victim] <= 1'b1;
      tag_q[set_idx][victim]   <= tag_in;
      if (victim == rr_q[set_idx])
        rr_q[set_idx] <= (rr_q[set_idx] == WAY_W'(WAYS - 1)) ? '0 : rr_q[set_idx] + 1'b1;
    end
  end

  // data array: written on fill and on store hit; no reset (read only when valid)
  always_ff @(posedge clk) begin
    if (state_q == S_MRSP && mem_rsp_valid && !we_q && !nc_q) begin
      data_q[set_idx][victim] <= mem_rsp_data;
    end else if (decide && hit && we_q) begin
      for (int b = 0; b < LINE_B; b++)
        if (st_strb[b]) data_q[set_idx][hit_way][b*8 +: 8] <= st_line[b*8 +: 8];
    end
  end

  a_mreq_hold: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_addr));

endmodule
