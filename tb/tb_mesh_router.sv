// tb_mesh_router: self-checking testbench of one mesh router, placed at
// (1,1) of a 3x3 mesh so that all five ports are used.
//
// Checks: a lone flit leaves exactly HOP_LAT (4) cycles after it entered;
// each flit leaves on the output that dimension-ordered routing picks for its
// destination (X first, then Y, local when it has arrived); under random
// traffic with random output back-pressure every flit leaves exactly once
// with its payload intact.
module tb_mesh_router;
  import ndp_pkg::*;
  localparam int unsigned PW = 32, HOP = 4;

  logic clk = 0, rst_n = 0;
  logic in_valid [5], in_ready [5], out_valid [5], out_ready [5];
  logic [NODE_W-1:0] in_dst [5], out_dst [5];
  logic [PW-1:0] in_data [5], out_data [5];
  int checks = 0, failures = 0;

  mesh_router #(.PW(PW), .MESH_X(3), .MESH_Y(3), .X(1), .Y(1), .HOP_LAT(HOP)) dut (.*);

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

  // expected port for a destination seen from (1,1): node = y*3 + x
  function automatic int exp_port(input int d);
    int dx = d % 3, dy = d / 3;
    if (dx > 1) return 2;
    if (dx < 1) return 4;
    if (dy > 1) return 3;
    if (dy < 1) return 1;
    return 0;
  endfunction

  int pending [int];     // id -> destination
  int sent = 0, got = 0;
  bit random_mode = 0;
  int next_id = 1;
  longint t_in [int];

  always @(posedge clk) begin
    int id;
    if (rst_n) begin
      for (int o = 0; o < 5; o++)
        if (out_valid[o] && out_ready[o]) begin
          id = int'(out_data[o]);
          got++;
          check(pending.exists(id), $sformatf("flit %0d unknown or duplicated", id));
          if (pending.exists(id)) begin
            check(exp_port(pending[id]) == o && int'(out_dst[o]) == pending[id],
                  $sformatf("flit %0d to %0d left on port %0d", id, pending[id], o));
            if (!random_mode) check($time - t_in[id] == HOP * 10,
                  $sformatf("hop latency %0d cycles", ($time - t_in[id]) / 10));
            pending.delete(id);
          end
        end
      for (int i = 0; i < 5; i++)
        if (in_valid[i] && in_ready[i]) begin
          pending[int'(in_data[i])] = int'(in_dst[i]);
          t_in[int'(in_data[i])] = $time;
          sent++;
        end
    end
  end

  initial begin
    for (int i = 0; i < 5; i++) begin
      in_valid[i] = 0; in_dst[i] = '0; in_data[i] = '0; out_ready[i] = 1;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // lone flits: every input to every destination
    for (int i = 0; i < 5; i++)
      for (int d = 0; d < 9; d++) begin
        @(negedge clk);
        in_valid[i] = 1; in_dst[i] = NODE_W'(d); in_data[i] = PW'(next_id++);
        @(negedge clk);
        in_valid[i] = 0;
        repeat (HOP + 2) @(negedge clk);
      end
    // random traffic with back-pressure
    random_mode = 1;
    repeat (2000) begin
      @(negedge clk);
      for (int i = 0; i < 5; i++) begin
        if (!in_valid[i] || in_ready[i]) begin
          // previous flit (if any) was taken at the last edge
          in_valid[i] = ($urandom() % 2);
          in_dst[i]   = NODE_W'($urandom() % 9);
          in_data[i]  = PW'(next_id++);
        end
        out_ready[i] = ($urandom() % 4) != 0;
      end
    end
    @(negedge clk);
    for (int i = 0; i < 5; i++) begin in_valid[i] = 0; out_ready[i] = 1; end
    repeat (50) @(posedge clk);
    #1 check(pending.num() == 0 && sent == got && sent > 1000,
             $sformatf("sent %0d got %0d pending %0d", sent, got, pending.num()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
