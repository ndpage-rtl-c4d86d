// mesh_noc: MESH_X x MESH_Y mesh of mesh_router instances, one router per
// NDP core / memory controller pair (node = y*MESH_X + x).
//
// Each node has one local injection port and one local ejection port. The
// design uses two such meshes: one carries memory requests from the cores
// to the memory controllers, the other carries responses back, so a
// response can never be blocked behind a request.
//
// A packet from node s to node d costs HOP_LAT cycles per router it passes
// (Manhattan distance + 1 routers), when the network is otherwise idle.
// Edge ports of boundary routers are tied off; XY routing never selects them.
//
// Mesh topology and hop latency follow the paper (Table I); the two
// separate networks are this design's choice.
module mesh_noc
  import ndp_pkg::*;
#(
  parameter int unsigned PW      = 512,
  parameter int unsigned MESH_X  = 2,
  parameter int unsigned MESH_Y  = 2,
  parameter int unsigned HOP_LAT = 4,
  localparam int unsigned N      = MESH_X * MESH_Y
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              inj_valid [N],
  output logic              inj_ready [N],
  input  logic [NODE_W-1:0] inj_dst   [N],
  input  logic [PW-1:0]     inj_data  [N],
  output logic              ej_valid  [N],
  input  logic              ej_ready  [N],
  output logic [PW-1:0]     ej_data   [N]
);
  // per-router port signals
  logic              iv [N][5];
  logic              ir [N][5];
  logic [NODE_W-1:0] id [N][5];
  logic [PW-1:0]     ix [N][5];
  logic              ov [N][5];
  logic              orr[N][5];
  logic [NODE_W-1:0] od [N][5];
  logic [PW-1:0]     ox [N][5];

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      localparam int unsigned K = y * MESH_X + x;

      mesh_router #(.PW(PW), .MESH_X(MESH_X), .MESH_Y(MESH_Y), .X(x), .Y(y),
                    .HOP_LAT(HOP_LAT)) u_r (
        .clk, .rst_n,
        .in_valid(iv[K]), .in_ready(ir[K]), .in_dst(id[K]), .in_data(ix[K]),
        .out_valid(ov[K]), .out_ready(orr[K]), .out_dst(od[K]), .out_data(ox[K]));

      // local port
      assign iv[K][0]    = inj_valid[K];
      assign id[K][0]    = inj_dst[K];
      assign ix[K][0]    = inj_data[K];
      assign inj_ready[K] = ir[K][0];
      assign ej_valid[K] = ov[K][0];
      assign ej_data[K]  = ox[K][0];
      assign orr[K][0]   = ej_ready[K];

      // north (1) <- south (3) of router above
      if (y > 0) begin : g_n
        assign iv[K][1] = ov[K-MESH_X][3];
        assign id[K][1] = od[K-MESH_X][3];
        assign ix[K][1] = ox[K-MESH_X][3];
        assign orr[K][1] = ir[K-MESH_X][3];
      end else begin : g_n0
        assign iv[K][1] = 1'b0;
        assign id[K][1] = '0;
        assign ix[K][1] = '0;
        assign orr[K][1] = 1'b0;
      end
      // south (3) <- north (1) of router below
      if (y < MESH_Y - 1) begin : g_s
        assign iv[K][3] = ov[K+MESH_X][1];
        assign id[K][3] = od[K+MESH_X][1];
        assign ix[K][3] = ox[K+MESH_X][1];
        assign orr[K][3] = ir[K+MESH_X][1];
      end else begin : g_s0
        assign iv[K][3] = 1'b0;
        assign id[K][3] = '0;
        assign ix[K][3] = '0;
        assign orr[K][3] = 1'b0;
      end
      // east (2) <- west (4) of router to the right
      if (x < MESH_X - 1) begin : g_e
        assign iv[K][2] = ov[K+1][4];
        assign id[K][2] = od[K+1][4];
        assign ix[K][2] = ox[K+1][4];
        assign orr[K][2] = ir[K+1][4];
      end else begin : g_e0
        assign iv[K][2] = 1'b0;
        assign id[K][2] = '0;
        assign ix[K][2] = '0;
        assign orr[K][2] = 1'b0;
      end
      // west (4) <- east (2) of router to the left
      if (x > 0) begin : g_w
        assign iv[K][4] = ov[K-1][2];
        assign id[K][4] = od[K-1][2];
        assign ix[K][4] = ox[K-1][2];
        assign orr[K][4] = ir[K-1][2];
      end else begin : g_w0
        assign iv[K][4] = 1'b0;
        assign id[K][4] = '0;
        assign ix[K][4] = '0;
        assign orr[K][4] = 1'b0;
      end
    end
  end

endmodule
