// mesh_router: one router of the 2D mesh that connects the NDP cores and
// the memory controllers on the logic layer.
//
// Five ports: 0 local, 1 north (y-1), 2 east (x+1), 3 south (y+1),
// 4 west (x-1). Every packet is one flit: a destination node number
// (node = y*MESH_X + x) and a payload of PW bits, which holds a whole 64-byte
// line (the 512-bit link width) plus the request header. Routing is
// dimension-ordered (X first, then Y), which cannot deadlock in a mesh.
//
// Each input has a one-flit buffer. A flit accepted on an input in cycle c
// may leave the router no earlier than cycle c+HOP_LAT, so every hop costs
// HOP_LAT cycles (default 4). Each output picks among the inputs that want it
// round-robin. An input is ready only while its buffer is empty, so ready
// never depends combinationally on valid.
//
// Follows the paper: mesh topology, 4-cycle hop latency, 512-bit link
// (Table I). This design's choices: single-flit packets, XY routing, one
// buffer per input, round-robin output arbitration.
module mesh_router
  import ndp_pkg::*;
#(
  parameter int unsigned PW      = 512,
  parameter int unsigned MESH_X  = 2,
  parameter int unsigned MESH_Y  = 2,
  parameter int unsigned X       = 0,
  parameter int unsigned Y       = 0,
  parameter int unsigned HOP_LAT = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid [5],
  output logic              in_ready [5],
  input  logic [NODE_W-1:0] in_dst   [5],
  input  logic [PW-1:0]     in_data  [5],
  output logic              out_valid [5],
  input  logic              out_ready [5],
  output logic [NODE_W-1:0] out_dst   [5],
  output logic [PW-1:0]     out_data  [5]
);
  localparam int unsigned AGE_W = $clog2(HOP_LAT + 1);

  logic              buf_v   [5];
  logic [NODE_W-1:0] buf_dst [5];
  logic [PW-1:0]     buf_d   [5];
  logic [AGE_W-1:0]  age_q   [5];
  logic [2:0]        rr_q    [5];

  // requested output of each buffered flit
  logic [2:0] route [5];
  logic       elig  [5];
  always_comb
    for (int i = 0; i < 5; i++) begin
      int unsigned dx, dy;
      dx = 32'(buf_dst[i]) % MESH_X;
      dy = 32'(buf_dst[i]) / MESH_X;
      if      (dx > X) route[i] = 3'd2;
      else if (dx < X) route[i] = 3'd4;
      else if (dy > Y) route[i] = 3'd3;
      else if (dy < Y) route[i] = 3'd1;
      else             route[i] = 3'd0;
      elig[i] = buf_v[i] && (age_q[i] >= AGE_W'(HOP_LAT - 1));
    end

  // output arbitration
  logic [2:0] gnt  [5];
  logic       gv   [5];
  logic [2:0] cand;
  always_comb begin
    cand = '0;
    for (int o = 0; o < 5; o++) begin
      gnt[o] = '0;
      gv[o]  = 1'b0;
      for (int k = 4; k >= 0; k--) begin
        cand = 3'((32'(rr_q[o]) + 32'(k)) % 5);
        if (elig[cand] && route[cand] == 3'(o)) begin
          gnt[o] = cand;
          gv[o]  = 1'b1;
        end
      end
      out_valid[o] = gv[o];
      out_dst[o]   = buf_dst[gnt[o]];
      out_data[o]  = buf_d[gnt[o]];
    end
  end

  logic deq [5];
  always_comb begin
    for (int i = 0; i < 5; i++) deq[i] = 1'b0;
    for (int o = 0; o < 5; o++)
      if (gv[o] && out_ready[o]) deq[gnt[o]] = 1'b1;
    for (int i = 0; i < 5; i++) in_ready[i] = !buf_v[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 5; i++) begin
        buf_v[i]   <= 1'b0;
        buf_dst[i] <= '0;
        buf_d[i]   <= '0;
        age_q[i]   <= '0;
        rr_q[i]    <= '0;
      end
    end else begin
      for (int i = 0; i < 5; i++) begin
        if (in_valid[i] && in_ready[i]) begin
          buf_v[i]   <= 1'b1;
          buf_dst[i] <= in_dst[i];
          buf_d[i]   <= in_data[i];
          age_q[i]   <= '0;
        end else if (deq[i]) begin
          buf_v[i] <= 1'b0;
        end else if (buf_v[i] && age_q[i] < AGE_W'(HOP_LAT - 1)) begin
          age_q[i] <= age_q[i] + 1'b1;
        end
      end
      for (int o = 0; o < 5; o++)
        if (gv[o] && out_ready[o]) rr_q[o] <= (gnt[o] == 3'd4) ? 3'd0 : gnt[o] + 3'd1;
    end
  end

endmodule
