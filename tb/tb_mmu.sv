// tb_mmu: self-checking testbench of the MMU (L1 ITLB/DTLB, L2 TLB, page
// table walker with PWCs) against page tables in the HBM model.
//
// Checks: a cold data translation walks the flattened table (3 PTE reads)
// and returns the mapped frame; the same page again hits the L1 DTLB in
// 1 cycle; the page through the instruction port misses the ITLB and hits
// the L2 TLB in 1+1+12 = 14 cycles without reading memory; an unmapped page
// faults and is not cached; finally both ports translate random pages at
// once (some repeated) and every answer matches the mapping, with one walk
// per distinct page.
module tb_mmu;
  import ndp_pkg::*;
  localparam int unsigned MEM_LAT = 20;
  localparam longint unsigned CR3 = 64'h0_4000_0000;

  logic clk = 0, rst_n = 0, flush = 0;
  paddr_t cr3_base = PA_W'(CR3);
  logic cr3_flat_en = 1;
  logic req_valid [2], req_ready [2], resp_valid [2], resp_fault [2];
  vpn_t req_vpn [2];
  xlat_t resp_xlat [2];
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  paddr_t mem_req_addr;
  line_t mem_rsp_data;
  logic ev_l1tlb_miss, ev_l2tlb_hit, ev_walk_done;
  logic [2:0] ev_walk_mem_acc, ev_walk_pwc_hits;
  int checks = 0, failures = 0;

  mmu dut (.*);

  logic     m_req_valid [1], m_req_ready [1], m_rsp_valid [1], m_rsp_ready [1];
  mem_req_t m_req [1];
  mem_rsp_t m_rsp [1];
  assign m_req_valid[0] = mem_req_valid;
  assign mem_req_ready  = m_req_ready[0];
  assign m_req[0]       = '{src: '0, tag: SRC_PTW, we: 1'b0, addr: mem_req_addr, wdata: '0, wstrb: '0};
  assign mem_rsp_valid  = m_rsp_valid[0];
  assign mem_rsp_data   = m_rsp[0].rdata;
  assign m_rsp_ready[0] = 1'b1;

  hbm_model #(.NPORT(1), .LAT(MEM_LAT)) u_mem (.clk, .rst_n,
    .req_valid(m_req_valid), .req_ready(m_req_ready), .req(m_req),
    .rsp_valid(m_rsp_valid), .rsp_ready(m_rsp_ready), .rsp(m_rsp));

  always #5 clk = ~clk;

  int walks = 0, l2hits = 0;
  always @(posedge clk) begin
    if (ev_walk_done) walks++;
    if (ev_l2tlb_hit) l2hits++;
  end

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

  task automatic xlate(input int p, input vpn_t v, output bit f, output xlat_t x, output int cyc, output int nrd);
    int r0 = u_mem.reads;
    @(negedge clk);
    req_valid[p] = 1; req_vpn[p] = v;
    while (!req_ready[p]) @(negedge clk);
    @(posedge clk); #1 req_valid[p] = 0;
    cyc = 1;
    while (!resp_valid[p]) begin @(posedge clk); #1; cyc++; end
    f = resp_fault[p]; x = resp_xlat[p];
    nrd = u_mem.reads - r0;
    @(posedge clk);
  endtask

  // expected frame for a page: a fixed hash, so the check is independent
  function automatic longint unsigned pfn_of(input vpn_t v);
    return longint'((32'(v) * 32'h9E37_79B9) >> 10) & 64'h3F_FFFF;
  endfunction

  vpn_t pages [64];

  initial begin
    bit f; xlat_t x; int c, n, w0;
    vpn_t v0;
    req_valid[0] = 0; req_valid[1] = 0; req_vpn[0] = '0; req_vpn[1] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (pages[i]) begin
      pages[i] = vpn_t'({$urandom(), $urandom()});
      if (i >= 32) pages[i][35:18] = pages[0][35:18];   // share a flattened node
      u_mem.map_page(CR3, pages[i], pfn_of(pages[i]), 1, 1);
    end
    v0 = pages[0];
    xlate(1, v0, f, x, c, n);
    check(!f && x.pfn == pfn_t'(pfn_of(v0)) && n == 3, $sformatf("cold walk: pfn %h reads %0d", x.pfn, n));
    xlate(1, v0, f, x, c, n);
    check(!f && x.pfn == pfn_t'(pfn_of(v0)) && n == 0 && c == 1, $sformatf("L1 DTLB hit latency %0d", c));
    w0 = walks;
    xlate(0, v0, f, x, c, n);
    check(!f && x.pfn == pfn_t'(pfn_of(v0)) && n == 0 && walks == w0,
          "instruction port: served from L2 TLB");
    check(c == 1 + 1 + 12, $sformatf("L2 TLB hit latency %0d, expected 14", c));
    #1 check(l2hits == 1, $sformatf("%0d L2 TLB hits counted, expected 1", l2hits));
    xlate(1, 36'h7_7777_7777, f, x, c, n);
    check(f, "unmapped page faults");
    xlate(1, 36'h7_7777_7777, f, x, c, n);
    check(f && n > 0, "fault was not cached");

    // both ports at once, random order with repeats
    w0 = walks;
    fork
      for (int i = 0; i < 120; i++) begin
        bit ff; xlat_t xx; int cc, nn; automatic int k = $urandom() % 64;
        xlate(1, pages[k], ff, xx, cc, nn);
        check(!ff && xx.pfn == pfn_t'(pfn_of(pages[k])), $sformatf("data port page %0d", k));
      end
      for (int i = 0; i < 120; i++) begin
        bit ff; xlat_t xx; int cc, nn; automatic int k = $urandom() % 64;
        xlate(0, pages[k], ff, xx, cc, nn);
        check(!ff && xx.pfn == pfn_t'(pfn_of(pages[k])), $sformatf("fetch port page %0d", k));
      end
    join
    check(walks - w0 <= 63, $sformatf("%0d walks for at most 63 new pages", walks - w0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
