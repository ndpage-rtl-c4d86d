// tb_l1d_cache: self-checking testbench of the L1 data cache (l1_cache at
// 32 KB, 8 ways, 4-cycle hit) against the HBM model.
//
// Checks load hit/miss latency (4 cycles for a hit, 4+1+MEM_LAT for a
// miss), write-through of stores (memory always updated, a hit also updates
// the line, a miss does not allocate), that a non-cacheable (metadata) load
// goes straight to memory in 1+MEM_LAT cycles and allocates nothing, LRU-free
// round-robin eviction of a full set, and finally a random mix of loads and
// stores compared with a reference memory kept by the testbench.
module tb_l1d_cache;
  import ndp_pkg::*;
  localparam int unsigned MEM_LAT = 10, HIT_LAT = 4;

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
  assign m_req[0] = '{src: '0, tag: SRC_L1D, we: mem_req_we, addr: mem_req_addr,
                      wdata: mem_req_wdata, wstrb: mem_req_wstrb};
  assign mem_rsp_valid  = m_rsp_valid[0];
  assign mem_rsp_data   = m_rsp[0].rdata;
  assign m_rsp_ready[0] = 1'b1;

  hbm_model #(.NPORT(1), .LAT(MEM_LAT)) u_mem (.clk, .rst_n,
    .req_valid(m_req_valid), .req_ready(m_req_ready), .req(m_req),
    .rsp_valid(m_rsp_valid), .rsp_ready(m_rsp_ready), .rsp(m_rsp));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [63:0] ref_mem [longint unsigned];
  function automatic logic [63:0] ref_rd(input longint unsigned a);
    return ref_mem.exists(a >> 3) ? ref_mem[a >> 3] : 64'd0;
  endfunction

  task automatic access(input paddr_t a, input bit we, input logic [63:0] wd, input logic [7:0] ws,
                        input bit nc, output logic [63:0] rd, output bit hit, output int cyc,
                        output int nrd);
    int r0 = u_mem.reads;
    @(negedge clk);
    req_valid = 1; req_addr = a; req_we = we; req_wdata = wd; req_wstrb = ws; req_nc = nc;
    while (!req_ready) @(negedge clk);
    @(posedge clk); #1 req_valid = 0;
    cyc = 1;
    while (!resp_valid) begin @(posedge clk); #1; cyc++; end
    rd = resp_rdata; hit = resp_hit;
    @(posedge clk);
    nrd = u_mem.reads - r0;
    if (we) begin
      logic [63:0] d = ref_rd(a);
      for (int b = 0; b < 8; b++) if (ws[b]) d[b*8 +: 8] = wd[b*8 +: 8];
      ref_mem[a >> 3] = d;
    end
  endtask

  initial begin
    logic [63:0] rd; bit h; int c, n;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4096; i++) begin
      automatic logic [63:0] v = {$urandom(), $urandom()};
      u_mem.write64(64'h10_0000 + i * 8, v);
      ref_mem[(64'h10_0000 + i * 8) >> 3] = v;
    end
    // miss then hit
    access(34'h10_0040, 0, 0, 0, 0, rd, h, c, n);
    check(!h && n == 1 && rd == ref_rd(64'h10_0040), "cold load");
    check(c == HIT_LAT + 1 + MEM_LAT, $sformatf("miss latency %0d", c));
    access(34'h10_0048, 0, 0, 0, 0, rd, h, c, n);
    check(h && n == 0 && rd == ref_rd(64'h10_0048), "load hit");
    check(c == HIT_LAT, $sformatf("hit latency %0d, expected %0d", c, HIT_LAT));
    // store hit: write-through, line updated
    access(34'h10_0050, 1, 64'h1122_3344_5566_7788, 8'h0F, 0, rd, h, c, n);
    check(u_mem.read64(64'h10_0050) == ref_rd(64'h10_0050), "store hit written through");
    access(34'h10_0050, 0, 0, 0, 0, rd, h, c, n);
    check(h && rd == ref_rd(64'h10_0050), "load after store hit");
    // store miss: no allocation
    access(34'h10_1000, 1, 64'hAAAA_BBBB_CCCC_DDDD, 8'hFF, 0, rd, h, c, n);
    check(u_mem.read64(64'h10_1000) == 64'hAAAA_BBBB_CCCC_DDDD, "store miss written");
    access(34'h10_1000, 0, 0, 0, 0, rd, h, c, n);
    check(!h && n == 1 && rd == 64'hAAAA_BBBB_CCCC_DDDD, "store miss did not allocate");
    // non-cacheable (metadata) load: bypasses the tag lookup, allocates nothing
    access(34'h10_2000, 0, 0, 0, 1, rd, h, c, n);
    check(!h && n == 1 && rd == ref_rd(64'h10_2000), "nc load data");
    check(c == 1 + MEM_LAT, $sformatf("nc load latency %0d, expected %0d", c, 1 + MEM_LAT));
    access(34'h10_2000, 0, 0, 0, 0, rd, h, c, n);
    check(!h && n == 1, "nc load must not allocate");
    // nc load of a cached line still reads memory
    access(34'h10_0048, 0, 0, 0, 1, rd, h, c, n);
    check(!h && n == 1 && rd == ref_rd(64'h10_0048), "nc load of cached line goes to memory");
    // round-robin eviction: 9 lines of one set (stride 4 KB = 64 sets x 64 B)
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    for (int i = 0; i < 9; i++) access(paddr_t'(64'h20_0000 + i * 4096), 0, 0, 0, 0, rd, h, c, n);
    access(34'h20_0000, 0, 0, 0, 0, rd, h, c, n);
    check(!h, "first line of full set must be evicted");
    access(34'h20_8000, 0, 0, 0, 0, rd, h, c, n);
    check(h, "newest line of set present");
    // random mix over 16 KB: data always matches the reference
    for (int i = 0; i < 600; i++) begin
      automatic paddr_t a = paddr_t'(64'h10_0000 + ($urandom() % 2048) * 8);
      automatic bit we = ($urandom() % 3) == 0;
      automatic bit nc = !we && ($urandom() % 5) == 0;
      automatic logic [63:0] wd = {$urandom(), $urandom()};
      automatic logic [7:0] ws = 8'($urandom());
      access(a, we, wd, ws, nc, rd, h, c, n);
      if (!we) check(rd == ref_rd(a), $sformatf("random load %h got %h exp %h", a, rd, ref_rd(a)));
      else     check(u_mem.read64(a) == ref_rd(a), "random store reached memory");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
