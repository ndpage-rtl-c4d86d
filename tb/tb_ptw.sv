// tb_ptw: self-checking testbench of the page table walker.
//
// Page tables are built in the HBM model: a flattened layout (PL3 entries
// pointing to 2 MB PL2/PL1 nodes) under one CR3 and a conventional 4-level
// layout under another. Checks:
//  - every walk returns the frame number and writable bit that were mapped;
//  - a cold walk of the flattened layout reads memory 3 times, the
//    conventional one 4 times (counted by the memory model);
//  - a second page under the same PL3 entry hits the L4 and L3 PWCs and reads
//    memory once; a repeated page hits all three PWCs and reads nothing;
//  - the walk latency is (MEM_LAT+3) cycles per level read from memory plus
//    two per PWC hit (lookup, advance), plus 1;
//  - an unmapped page faults; flattening disabled in the control register
//    makes the walker ignore the flattened-node bit.
module tb_ptw;
  import ndp_pkg::*;
  localparam int unsigned MEM_LAT = 20;

  logic clk = 0, rst_n = 0, flush = 0;
  paddr_t cr3_base = '0;
  logic cr3_flat_en = 1;
  logic req_valid = 0, req_ready, resp_valid, resp_fault;
  vpn_t req_vpn = '0;
  xlat_t resp_xlat;
  logic [2:0] resp_mem_acc, resp_pwc_hits;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  paddr_t mem_req_addr;
  line_t mem_rsp_data;
  int checks = 0, failures = 0;

  ptw dut (.*);

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

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // walk one page; returns fault, translation, memory reads and cycles
  task automatic walk(input vpn_t v, output bit f, output xlat_t x, output int nrd, output int cyc);
    int r0 = u_mem.reads;
    @(negedge clk);
    req_valid = 1; req_vpn = v;
    while (!req_ready) @(negedge clk);
    @(posedge clk); #1 req_valid = 0;
    cyc = 1;
    while (!resp_valid) begin @(posedge clk); #1; cyc++; end
    f = resp_fault; x = resp_xlat;
    nrd = u_mem.reads - r0;
    check(int'(resp_mem_acc) == nrd, "walker's own access count disagrees with memory");
    @(posedge clk);
  endtask

  localparam longint unsigned CR3_FLAT = 64'h0_4000_0000;
  localparam longint unsigned CR3_CONV = 64'h0_4000_1000;

  initial begin
    bit f; xlat_t x; int n, c;
    vpn_t va, vb, vc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    va = 36'h0_0123_4567;
    vb = {va[35:18], 18'h2_1ABC};        // same PL4/PL3 entries, other page
    vc = 36'h8_8000_0042;
    u_mem.map_page(CR3_FLAT, va, 64'h1_2345, 1, 1);
    u_mem.map_page(CR3_FLAT, vb, 64'h2_0001, 0, 1);
    u_mem.map_page(CR3_CONV, vc, 64'h3_0FED, 1, 0);
    u_mem.map_page(CR3_CONV, va, 64'h0_0777, 1, 0);

    // flattened layout: 3 sequential accesses
    cr3_base = PA_W'(CR3_FLAT);
    walk(va, f, x, n, c);
    check(!f && x.pfn == 22'h1_2345 && x.writable, $sformatf("flat walk pfn %h", x.pfn));
    check(n == 3, $sformatf("cold flattened walk read memory %0d times, expected 3", n));
    check(c == 3 * (MEM_LAT + 3) + 1, $sformatf("cold flattened walk took %0d cycles, expected %0d", c, 3 * (MEM_LAT + 3) + 1));
    walk(vb, f, x, n, c);
    check(!f && x.pfn == 22'h2_0001 && !x.writable, "flat walk 2");
    check(n == 1 && resp_pwc_hits == 2, $sformatf("L4/L3 PWC hits: reads %0d pwc %0d", n, resp_pwc_hits));
    check(c == 2 * 2 + (MEM_LAT + 3) + 1, $sformatf("warm walk %0d cycles", c));
    walk(va, f, x, n, c);
    check(!f && x.pfn == 22'h1_2345 && n == 0 && resp_pwc_hits == 3, "repeat walk served by PWCs");
    check(c == 3 * 2 + 1, $sformatf("all-PWC walk %0d cycles", c));
    // unmapped page in the flattened node -> fault
    walk({va[35:18], 18'h3_FFFF}, f, x, n, c);
    check(f, "unmapped flattened entry must fault");
    walk(36'hF_FFFF_FFFF, f, x, n, c);
    check(f && n == 1, "unmapped PL4 entry faults after one read");

    // conventional layout: 4 sequential accesses
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    cr3_base = PA_W'(CR3_CONV);
    walk(vc, f, x, n, c);
    check(!f && x.pfn == 22'h3_0FED, "conventional walk pfn");
    check(n == 4, $sformatf("conventional walk read memory %0d times, expected 4", n));
    check(c == 4 * (MEM_LAT + 3) + 1, $sformatf("conventional walk %0d cycles", c));

    // flattening disabled: the flat bit of the flattened layout is ignored
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    cr3_base = PA_W'(CR3_FLAT);
    cr3_flat_en = 0;
    walk(va, f, x, n, c);
    // the 2 MB node is then read as a PL2 table indexed by VA[29:21]: its
    // entry there is empty, so the walk faults after the third read
    check(f && n == 3, $sformatf("walk with flattening disabled: fault %0d reads %0d", f, n));
    cr3_flat_en = 1;
    walk(va, f, x, n, c);
    check(!f && x.pfn == 22'h1_2345, "walk after re-enabling flattening");

    // random pages in both layouts
    for (int i = 0; i < 40; i++) begin
      automatic vpn_t v = vpn_t'({$urandom(), $urandom()});
      automatic longint unsigned pf = longint'($urandom() & 32'h3F_FFFF);
      automatic bit fl = i[0];
      u_mem.map_page(fl ? CR3_FLAT : CR3_CONV, v, pf, 1, fl);
      cr3_base = PA_W'(fl ? CR3_FLAT : CR3_CONV);
      @(negedge clk); flush = 1; @(negedge clk); flush = 0;
      walk(v, f, x, n, c);
      check(!f && x.pfn == pfn_t'(pf) && n == (fl ? 3 : 4), $sformatf("random walk %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
