// tb_l1i_cache: self-checking testbench of the L1 instruction cache
// (l1_cache at 32 KB, 8 ways, 4-cycle hit) used as a read-only fetch cache.
//
// A 16 KB code region is fetched sequentially twice, 8 bytes at a time.
// The first pass must miss once per 64-byte line and hit the other 7 words;
// the second pass must hit everywhere (16 KB fits in 32 KB). Fetched data is
// compared with the code written into the memory model; hit latency is 4.
// A 40 KB region, larger than the cache, then must miss again on its second
// pass.
module tb_l1i_cache;
  import ndp_pkg::*;
  localparam int unsigned MEM_LAT = 8;

  logic clk = 0, rst_n = 0, flush = 0;
  logic req_valid = 0, req_ready, req_we = 0, req_nc = 0;
  paddr_t req_addr = '0;
  logic [63:0] req_wdata = '0;
  logic [7:0] req_wstrb = '0;
  logic resp_valid, resp_hit;
  logic [63:0] resp_rdata;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  paddr_t mem_req_addr;
  line_t mem_req_wdata, mem_rsp_data;
  logic [LINE_B-1:0] mem_req_wstrb;
  int checks = 0, failures = 0;

  l1_cache dut (.*);

  logic     m_req_valid [1], m_req_ready [1], m_rsp_valid [1], m_rsp_ready [1];
  mem_req_t m_req [1];
  mem_rsp_t m_rsp [1];
  assign m_req_valid[0] = mem_req_valid;
  assign mem_req_ready  = m_req_ready[0];
  assign m_req[0] = '{src: '0, tag: SRC_L1I, we: mem_req_we, addr: mem_req_addr,
                      wdata: mem_req_wdata, wstrb: mem_req_wstrb};
  assign mem_rsp_valid  = m_rsp_valid[0];
  assign mem_rsp_data   = m_rsp[0].rdata;
  assign m_rsp_ready[0] = 1'b1;

  hbm_model #(.NPORT(1), .LAT(MEM_LAT)) u_mem (.clk, .rst_n,
    .req_valid(m_req_valid), .req_ready(m_req_ready), .req(m_req),
    .rsp_valid(m_rsp_valid), .rsp_ready(m_rsp_ready), .rsp(m_rsp));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [63:0] code(input longint unsigned a);
    return {32'hC0DE0000 ^ 32'(a), 32'(a * 32'h9E37_79B9)};
  endfunction

  task automatic fetch(input paddr_t a, output bit hit, output int cyc);
    @(negedge clk);
    req_valid = 1; req_addr = a;
    while (!req_ready) @(negedge clk);
    @(posedge clk); #1 req_valid = 0;
    cyc = 1;
    while (!resp_valid) begin @(posedge clk); #1; cyc++; end
    hit = resp_hit;
    check(resp_rdata == code(longint'(a)), $sformatf("fetch %h data", a));
    if (hit) check(cyc == 4, "hit latency");
    @(posedge clk);
  endtask

  initial begin
    bit h; int c, hits, misses;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (longint unsigned a = 64'h8_0000; a < 64'h8_0000 + 40 * 1024; a += 8)
      u_mem.write64(a, code(a));
    for (int pass = 0; pass < 2; pass++) begin
      hits = 0; misses = 0;
      for (int i = 0; i < 16 * 1024; i += 8) begin
        fetch(paddr_t'(64'h8_0000 + i), h, c);
        if (h) hits++; else misses++;
      end
      if (pass == 0) check(misses == 256 && hits == 256 * 7, $sformatf("pass 0: %0d misses", misses));
      else           check(misses == 0, $sformatf("pass 1: %0d misses", misses));
    end
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    for (int pass = 0; pass < 2; pass++) begin
      misses = 0;
      for (int i = 0; i < 40 * 1024; i += 64) begin
        fetch(paddr_t'(64'h8_0000 + i), h, c);
        if (!h) misses++;
      end
      check(misses == 640, $sformatf("40 KB pass %0d: %0d misses", pass, misses));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
