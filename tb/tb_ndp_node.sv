// tb_ndp_node: self-checking testbench of one NDP core node (MMU, L1 caches,
// metadata bypass port) connected straight to the HBM model.
//
// Checks: a cold load translates through a 3-read flattened walk, then
// misses L1 and reads the data line; the loaded value matches memory. The
// walker's PTE reads leave as metadata requests (counted) and do not enter
// the L1 data cache: a later ordinary load of the very word that held the PTE
// (through a second mapping of the table page) misses L1. Stores reach memory
// and are read back; a store to a read-only page and an access to an unmapped
// page fault; instruction fetches return the code written to memory; a random
// mix of loads and stores over 24 pages matches a reference memory.
module tb_ndp_node;
  import ndp_pkg::*;
  localparam int unsigned MEM_LAT = 12;
  localparam longint unsigned CR3 = 64'h0_4000_0000;

  logic clk = 0, rst_n = 0, flush = 0;
  paddr_t cr3_base = PA_W'(CR3);
  logic cr3_flat_en = 1;
  logic core_req_valid [2], core_req_ready [2], core_req_we [2], core_req_nc [2];
  vaddr_t core_req_vaddr [2];
  logic [63:0] core_req_wdata [2], core_resp_rdata [2];
  logic [7:0] core_req_wstrb [2];
  logic core_resp_valid [2], core_resp_fault [2];
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;
  logic ev_l1tlb_miss, ev_l2tlb_hit, ev_walk_done, ev_meta_req, ev_l1_hit, ev_l1_miss;
  logic [2:0] ev_walk_mem_acc, ev_walk_pwc_hits;
  int checks = 0, failures = 0;

  ndp_node #(.NODE_ID(0)) dut (.*);

  logic     m_req_valid [1], m_req_ready [1], m_rsp_valid [1], m_rsp_ready [1];
  mem_req_t m_req [1];
  mem_rsp_t m_rsp [1];
  assign m_req_valid[0] = mem_req_valid;
  assign mem_req_ready  = m_req_ready[0];
  assign m_req[0]       = mem_req;
  assign mem_rsp_valid  = m_rsp_valid[0];
  assign mem_rsp        = m_rsp[0];
  assign m_rsp_ready[0] = 1'b1;

  hbm_model #(.NPORT(1), .LAT(MEM_LAT)) u_mem (.clk, .rst_n,
    .req_valid(m_req_valid), .req_ready(m_req_ready), .req(m_req),
    .rsp_valid(m_rsp_valid), .rsp_ready(m_rsp_ready), .rsp(m_rsp));

  always #5 clk = ~clk;

  int metas = 0, l1miss = 0, walks = 0;
  always @(posedge clk) begin
    if (ev_meta_req) metas++;
    if (ev_l1_miss) l1miss++;
    if (ev_walk_done) walks++;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic access(input int p, input vaddr_t va, input bit we, input logic [63:0] wd,
                        output bit f, output logic [63:0] rd);
    @(negedge clk);
    core_req_valid[p] = 1; core_req_vaddr[p] = va; core_req_we[p] = we;
    core_req_wdata[p] = wd; core_req_wstrb[p] = 8'hFF; core_req_nc[p] = 0;
    while (!core_req_ready[p]) @(negedge clk);
    @(posedge clk); #1 core_req_valid[p] = 0;
    while (!core_resp_valid[p]) begin @(posedge clk); #1; end
    f = core_resp_fault[p]; rd = core_resp_rdata[p];
    @(posedge clk); #1;
  endtask

  function automatic longint unsigned pfn_of(input int i);
    return 64'h1000 + i * 3;          // frames at 16 MB and up
  endfunction

  logic [63:0] ref_mem [longint unsigned];

  initial begin
    bit f; logic [63:0] rd; int m0, l0;
    vaddr_t va;
    longint unsigned pte_pa;
    for (int p = 0; p < 2; p++) begin
      core_req_valid[p] = 0; core_req_vaddr[p] = '0; core_req_we[p] = 0;
      core_req_wdata[p] = '0; core_req_wstrb[p] = '0; core_req_nc[p] = 0;
    end
    // 24 writable data pages at VA 0x7f00_0000_0000 + i*4K, one read-only
    for (int i = 0; i < 24; i++)
      u_mem.map_page(CR3, 36'h7_F000_0000 + 36'(i), pfn_of(i), 1, 1);
    u_mem.map_page(CR3, 36'h7_F000_0100, 64'h2000, 0, 1);
    for (int i = 0; i < 24 * 512; i++) begin
      automatic longint unsigned a = (pfn_of(i / 512) << 12) + (i % 512) * 8;
      automatic logic [63:0] v = {$urandom(), $urandom()};
      u_mem.write64(a, v);
      ref_mem[a] = v;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // cold load: walk (3 metadata reads) + one data line read
    m0 = u_mem.reads;
    access(1, 48'h7F00_0000_0008, 0, 0, f, rd);
    check(!f && rd == ref_mem[(pfn_of(0) << 12) + 8], "cold load data");
    check(u_mem.reads - m0 == 4 && metas == 3 && walks == 1,
          $sformatf("cold load: %0d reads, %0d metadata", u_mem.reads - m0, metas));
    // the leaf PTE's word, reached through an ordinary mapping of its page
    pte_pa = 0;
    begin
      logic [63:0] e4, e3;
      automatic logic [35:0] vpn = 36'h7_F000_0000;
      e4 = u_mem.read64(CR3 + 64'(vpn[35:27]) * 8);
      e3 = u_mem.read64((e4 & 64'hF_FFFF_F000) + 64'(vpn[26:18]) * 8);
      pte_pa = (e3 & 64'hF_FFFF_F000) + 64'(vpn[17:0]) * 8;
    end
    u_mem.map_page(CR3, 36'h1_0000_0000, pte_pa >> 12, 0, 1);
    l0 = l1miss;
    access(1, {36'h1_0000_0000, 12'(pte_pa)}, 0, 0, f, rd);
    #1 check(!f && rd == u_mem.read64(pte_pa) && rd[0] && l1miss == l0 + 1,
          "PTE fetched by the walker was not cached in L1 (metadata bypass)");
    // store / load back
    access(1, 48'h7F00_0000_1010, 1, 64'hFEED_F00D_1234_5678, f, rd);
    check(!f && u_mem.read64((pfn_of(1) << 12) + 16) == 64'hFEED_F00D_1234_5678, "store reached memory");
    ref_mem[(pfn_of(1) << 12) + 16] = 64'hFEED_F00D_1234_5678;
    access(1, 48'h7F00_0000_1010, 0, 0, f, rd);
    check(!f && rd == 64'hFEED_F00D_1234_5678, "load after store");
    // protection and unmapped faults
    m0 = u_mem.writes;
    access(1, 48'h7F00_0010_0000, 1, 64'h1, f, rd);
    check(f && u_mem.writes == m0, "store to read-only page faults, nothing written");
    access(1, 48'h7F00_0010_0000, 0, 0, f, rd);
    check(!f, "load from read-only page allowed");
    access(1, 48'h1234_5678_9000, 0, 0, f, rd);
    check(f, "unmapped page faults");
    // instruction fetch
    for (int i = 0; i < 64; i++) begin
      automatic vaddr_t fa = 48'h7F00_0000_2000 + 48'(i * 8);
      access(0, fa, 0, 0, f, rd);
      check(!f && rd == ref_mem[(pfn_of(2) << 12) + i * 8], "fetch data");
    end
    // random mix on both ports
    fork
      for (int i = 0; i < 300; i++) begin
        automatic int pg = $urandom() % 24, w = $urandom() % 512;
        automatic bit we = ($urandom() % 3) == 0;
        automatic logic [63:0] wd = {$urandom(), $urandom()};
        automatic longint unsigned pa = (pfn_of(pg) << 12) + w * 8;
        bit ff; logic [63:0] r;
        access(1, 48'h7F00_0000_0000 + 48'(pg * 4096 + w * 8), we, wd, ff, r);
        if (we) ref_mem[pa] = wd;
        else check(!ff && r == ref_mem[pa], $sformatf("random load page %0d word %0d", pg, w));
      end
      for (int i = 0; i < 200; i++) begin
        automatic int pg = 12 + $urandom() % 12, w = $urandom() % 512;
        bit ff; logic [63:0] r;
        access(0, 48'h7F00_0000_0000 + 48'(pg * 4096 + w * 8), 0, 0, ff, r);
        check(!ff && r == u_mem.read64((pfn_of(pg) << 12) + w * 8) || pg < 12, "random fetch");
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
