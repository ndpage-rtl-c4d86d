// tb_mesh_noc: self-checking testbench of the 2x2 mesh (the 4-core system).
//
// Checks: a lone packet from node s to node d is delivered at node d exactly
// HOP_LAT*(hops+1) cycles after injection, hops being the Manhattan distance;
// under random all-to-all traffic with random ejection back-pressure every
// packet arrives once, at the right node, with its payload.
module tb_mesh_noc;
  import ndp_pkg::*;
  localparam int unsigned PW = 32, HOP = 4, MX = 2, MY = 2, N = MX * MY;

  logic clk = 0, rst_n = 0;
  logic inj_valid [N], inj_ready [N], ej_valid [N], ej_ready [N];
  logic [NODE_W-1:0] inj_dst [N];
  logic [PW-1:0] inj_data [N], ej_data [N];
  int checks = 0, failures = 0;

  mesh_noc #(.PW(PW), .MESH_X(MX), .MESH_Y(MY), .HOP_LAT(HOP)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // payload = {src[7:0], dst[7:0], id[15:0]}
  int pending [int];
  longint t_in [int];
  int sent = 0, got = 0, next_id = 1;
  bit random_mode = 0;

  always @(posedge clk) begin
    int id, d, s, hops;
    if (rst_n) begin
      for (int n = 0; n < N; n++) begin
        if (ej_valid[n] && ej_ready[n]) begin
          id = int'(ej_data[n][15:0]);
          d  = int'(ej_data[n][23:16]);
          s  = int'(ej_data[n][31:24]);
          got++;
          check(pending.exists(id) && d == n, $sformatf("packet %0d for %0d arrived at %0d", id, d, n));
          if (!random_mode) begin
            hops = ((s % MX > d % MX) ? s % MX - d % MX : d % MX - s % MX)
                 + ((s / MX > d / MX) ? s / MX - d / MX : d / MX - s / MX);
            check($time - t_in[id] == HOP * (hops + 1) * 10,
                  $sformatf("%0d->%0d took %0d cycles, expected %0d", s, d, ($time - t_in[id]) / 10, HOP * (hops + 1)));
          end
          pending.delete(id);
        end
        if (inj_valid[n] && inj_ready[n]) begin
          id = int'(inj_data[n][15:0]);
          pending[id] = 1;
          t_in[id] = $time;
          sent++;
        end
      end
    end
  end

  initial begin
    for (int n = 0; n < N; n++) begin
      inj_valid[n] = 0; inj_dst[n] = '0; inj_data[n] = '0; ej_ready[n] = 1;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < N; s++)
      for (int d = 0; d < N; d++) begin
        @(negedge clk);
        inj_valid[s] = 1; inj_dst[s] = NODE_W'(d);
        inj_data[s] = {8'(s), 8'(d), 16'(next_id++)};
        @(negedge clk);
        inj_valid[s] = 0;
        repeat (HOP * 4) @(negedge clk);
      end
    random_mode = 1;
    repeat (3000) begin
      @(negedge clk);
      for (int n = 0; n < N; n++) begin
        if (!inj_valid[n] || inj_ready[n]) begin
          automatic int d = $urandom() % N;
          inj_valid[n] = ($urandom() % 3) == 0;
          inj_dst[n]   = NODE_W'(d);
          inj_data[n]  = {8'(n), 8'(d), 16'(next_id++)};
        end
        ej_ready[n] = ($urandom() % 3) != 0;
      end
    end
    @(negedge clk);
    for (int n = 0; n < N; n++) begin inj_valid[n] = 0; ej_ready[n] = 1; end
    repeat (100) @(posedge clk);
    #1 check(pending.num() == 0 && sent == got && sent > 1000,
             $sformatf("sent %0d got %0d pending %0d", sent, got, pending.num()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
