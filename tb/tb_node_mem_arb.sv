// tb_node_mem_arb: self-checking testbench of the node memory port.
//
// Three requesters (L1I, L1D, page walker) issue random requests while the
// downstream ready toggles at random. Checks: every accepted request carries
// the node number, the winner's tag and the winner's address/data; a request
// that waits is held unchanged; with all three requesting and ready always
// high the grants rotate 0,1,2; meta_fire counts exactly the walker's
// (metadata) requests; responses reach only the requester named by their tag.
module tb_node_mem_arb;
  import ndp_pkg::*;
  localparam int unsigned NODE = 5;

  logic clk = 0, rst_n = 0;
  logic req_valid [3], req_ready [3], req_we [3], rsp_valid [3];
  paddr_t req_addr [3];
  line_t req_wdata [3], rsp_data;
  logic [LINE_B-1:0] req_wstrb [3];
  logic out_valid, out_ready = 0, in_rsp_valid = 0, meta_fire;
  mem_req_t out_req;
  mem_rsp_t in_rsp = '0;
  int checks = 0, failures = 0;

  node_mem_arb #(.NODE_ID(NODE)) dut (.*);

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

  int sent [3];
  int metas = 0;
  bit rotate_mode = 0;
  int last_g = -1;

  // requester models: hold a request until it is accepted
  always @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < 3; i++) begin
        req_valid[i] <= 0; req_we[i] <= 0; req_addr[i] <= '0; req_wdata[i] <= '0; req_wstrb[i] <= '0;
      end
    end else begin
      for (int i = 0; i < 3; i++) begin
        if (req_valid[i] && req_ready[i]) begin
          // accepted: check what left
          check(out_req.src == NODE_W'(NODE) && out_req.tag == TAG_W'(i)
                && out_req.addr == req_addr[i] && out_req.we == req_we[i]
                && out_req.wdata == req_wdata[i], $sformatf("payload of requester %0d", i));
          if (rotate_mode && last_g >= 0) check(i == (last_g + 1) % 3, "round-robin order");
          last_g = i;
          sent[i]++;
          req_valid[i] <= rotate_mode;
        end else if (!req_valid[i] && ($urandom() % 3 == 0 || rotate_mode)) begin
          req_valid[i] <= 1;
          req_we[i]    <= (i != 2) && ($urandom() % 2 == 1);
          req_addr[i]  <= paddr_t'({$urandom(), $urandom()});
          req_wdata[i] <= {16{$urandom()}};
          req_wstrb[i] <= {2{$urandom()}};
        end
      end
      if (meta_fire) metas++;
    end
  end

  always @(negedge clk) if (!rotate_mode) out_ready = ($urandom() % 2 == 1);

  // a waiting request must not change
  mem_req_t prev;
  logic prev_wait = 0;
  always @(posedge clk) begin
    if (prev_wait) check(out_valid && out_req == prev, "held request changed");
    prev_wait <= rst_n && out_valid && !out_ready;
    prev <= out_req;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3000) @(posedge clk);
    @(negedge clk);
    check(metas == sent[2] && sent[0] > 100 && sent[1] > 100 && sent[2] > 100,
          $sformatf("sent %0d/%0d/%0d metas %0d", sent[0], sent[1], sent[2], metas));
    // all requesters busy, ready high: grants must rotate
    rotate_mode = 1; out_ready = 1; last_g = -1;
    repeat (60) @(posedge clk);
    rotate_mode = 0;
    // response steering
    for (int t = 0; t < 3; t++) begin
      @(negedge clk);
      in_rsp_valid = 1; in_rsp = '{dst: NODE_W'(NODE), tag: TAG_W'(t), rdata: {16{32'(t + 7)}}};
      #1;
      for (int i = 0; i < 3; i++) check(rsp_valid[i] == (i == t), "response steering");
      check(rsp_data == {16{32'(t + 7)}}, "response data");
    end
    @(negedge clk); in_rsp_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
