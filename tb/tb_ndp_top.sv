// tb_ndp_top: end-to-end testbench of the whole logic layer at its default
// size (2x2 mesh, four NDP core nodes, four memory controllers, 32 KB L1s,
// paper-sized TLBs), with an HBM model behind the four controllers.
//
// All four cores run at once in one address space whose page tables use the
// flattened PL2/PL1 layout. Each core loads and stores at random in its own
// 32 pages (pages are interleaved over the controllers, so most accesses
// cross the mesh), fetches instructions from a shared code page, and makes
// one faulting access. Every load is compared with a reference memory.
// Then all TLBs, PWCs and caches are flushed, the control register is
// switched to a second address space with conventional 4-level tables and
// flattening disabled, and the cores read again.
//
// It counts how often each mechanism happened and fails if one never did:
// L1 TLB misses, L2 TLB hits, page walks, walks with 3 memory reads
// (flattened) and with 4 (conventional), PWC hits, metadata requests that
// bypass L1, L1 hits and misses, faults, remote (multi-hop) memory requests.
module tb_ndp_top;
  import ndp_pkg::*;
  localparam int unsigned N = 4;
  localparam longint unsigned CR3_FLAT = 64'h0_4000_0000;
  localparam longint unsigned CR3_CONV = 64'h0_4000_1000;

  logic clk = 0, rst_n = 0, flush = 0;
  paddr_t cr3_base = PA_W'(CR3_FLAT);
  logic cr3_flat_en = 1;
  logic        core_req_valid  [N][2], core_req_ready [N][2], core_req_we [N][2], core_req_nc [N][2];
  vaddr_t      core_req_vaddr  [N][2];
  logic [63:0] core_req_wdata  [N][2], core_resp_rdata [N][2];
  logic [7:0]  core_req_wstrb  [N][2];
  logic        core_resp_valid [N][2], core_resp_fault [N][2];
  logic        mc_req_valid [N], mc_req_ready [N], mc_rsp_valid [N], mc_rsp_ready [N];
  mem_req_t    mc_req [N];
  mem_rsp_t    mc_rsp [N];
  logic        ev_l1tlb_miss [N], ev_l2tlb_hit [N], ev_walk_done [N], ev_meta_req [N];
  logic        ev_l1_hit [N], ev_l1_miss [N];
  logic [2:0]  ev_walk_mem_acc [N], ev_walk_pwc_hits [N];
  int checks = 0, failures = 0;

  ndp_top dut (.*);

  hbm_model #(.NPORT(N), .LAT(20)) u_mem (.clk, .rst_n,
    .req_valid(mc_req_valid), .req_ready(mc_req_ready), .req(mc_req),
    .rsp_valid(mc_rsp_valid), .rsp_ready(mc_rsp_ready), .rsp(mc_rsp));

  always #5 clk = ~clk;

  // ---------------- event counters ----------------
  int c_l1tlb_miss = 0, c_l2tlb_hit = 0, c_walk = 0, c_walk3 = 0, c_walk4 = 0;
  int c_pwc_hit = 0, c_meta = 0, c_l1_hit = 0, c_l1_miss = 0, c_fault = 0, c_remote = 0;
  always @(posedge clk) begin
    for (int n = 0; n < N; n++) begin
      if (ev_l1tlb_miss[n]) c_l1tlb_miss++;
      if (ev_l2tlb_hit[n])  c_l2tlb_hit++;
      if (ev_walk_done[n]) begin
        c_walk++;
        if (ev_walk_mem_acc[n] == 3) c_walk3++;
        if (ev_walk_mem_acc[n] == 4) c_walk4++;
        c_pwc_hit += int'(ev_walk_pwc_hits[n]);
      end
      if (ev_meta_req[n]) c_meta++;
      if (ev_l1_hit[n])   c_l1_hit++;
      if (ev_l1_miss[n])  c_l1_miss++;
      if (mc_req_valid[n] && mc_req_ready[n] && int'(mc_req[n].src) != n) c_remote++;
      // a controller must only see requests for the pages it owns
      if (mc_req_valid[n] && mc_req_ready[n])
        if ((int'(mc_req[n].addr >> 12) % N) != n) begin
          failures++;
          $display("FAIL: controller %0d got address %h", n, mc_req[n].addr);
        end
    end
  end

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

  task automatic access(input int n, input int p, input vaddr_t va, input bit we,
                        input logic [63:0] wd, output bit f, output logic [63:0] rd);
    @(negedge clk);
    core_req_valid[n][p] = 1; core_req_vaddr[n][p] = va; core_req_we[n][p] = we;
    core_req_wdata[n][p] = wd; core_req_wstrb[n][p] = 8'hFF; core_req_nc[n][p] = 0;
    while (!core_req_ready[n][p]) @(negedge clk);
    @(posedge clk); #1 core_req_valid[n][p] = 0;
    while (!core_resp_valid[n][p]) begin @(posedge clk); #1; end
    f = core_resp_fault[n][p]; rd = core_resp_rdata[n][p];
    if (f) c_fault++;
    @(posedge clk); #1;
  endtask

  // layout: node n, page i -> VPN 0x7_F000_0000 + n*64 + i, frame 0x1000 + n*64 + i
  function automatic logic [35:0] vpn_of(input int n, input int i);
    return 36'h7_F000_0000 + 36'(n * 64 + i);
  endfunction
  function automatic longint unsigned pfn_of(input int n, input int i);
    return 64'h1000 + longint'(n * 64 + i);
  endfunction
  localparam logic [35:0] CODE_VPN = 36'h0_0040_0000;
  localparam longint unsigned CODE_PFN = 64'h0F00;

  logic [63:0] ref_mem [longint unsigned];

  task automatic core_run(input int n, input int ops);
    for (int k = 0; k < ops; k++) begin
      automatic int pg = $urandom() % 32, w = $urandom() % 512;
      automatic bit we = ($urandom() % 4) == 0;
      automatic logic [63:0] wd = {$urandom(), $urandom()};
      automatic longint unsigned pa = (pfn_of(n, pg) << 12) + w * 8;
      bit f; logic [63:0] r;
      access(n, 1, {vpn_of(n, pg), 12'(w * 8)}, we, wd, f, r);
      if (we) ref_mem[pa] = wd;
      else check(!f && r == ref_mem[pa], $sformatf("core %0d load page %0d word %0d", n, pg, w));
    end
  endtask

  task automatic core_fetch(input int n);
    for (int k = 0; k < 32; k++) begin
      bit f; logic [63:0] r;
      access(n, 0, {CODE_VPN, 12'(k * 8)}, 0, 0, f, r);
      check(!f && r == ref_mem[(CODE_PFN << 12) + k * 8], $sformatf("core %0d fetch %0d", n, k));
    end
  endtask

  initial begin
    for (int n = 0; n < N; n++)
      for (int p = 0; p < 2; p++) begin
        core_req_valid[n][p] = 0; core_req_vaddr[n][p] = '0; core_req_we[n][p] = 0;
        core_req_wdata[n][p] = '0; core_req_wstrb[n][p] = '0; core_req_nc[n][p] = 0;
      end
    // page tables: flattened layout under CR3_FLAT, conventional under CR3_CONV
    for (int n = 0; n < N; n++)
      for (int i = 0; i < 32; i++) begin
        u_mem.map_page(CR3_FLAT, vpn_of(n, i), pfn_of(n, i), 1, 1);
        u_mem.map_page(CR3_CONV, vpn_of(n, i), pfn_of(n, i), 1, 0);
      end
    u_mem.map_page(CR3_FLAT, CODE_VPN, CODE_PFN, 0, 1);
    // data: every word of the data pages and the code page
    for (int n = 0; n < N; n++)
      for (int i = 0; i < 32; i++)
        for (int w = 0; w < 512; w++) begin
          automatic longint unsigned a = (pfn_of(n, i) << 12) + w * 8;
          automatic logic [63:0] v = {32'(a), $urandom()};
          u_mem.write64(a, v);
          ref_mem[a] = v;
        end
    for (int w = 0; w < 512; w++) begin
      automatic longint unsigned a = (CODE_PFN << 12) + w * 8;
      u_mem.write64(a, {32'hC0DE_0000, 32'(w)});
      ref_mem[a] = {32'hC0DE_0000, 32'(w)};
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // phase 1: all cores, flattened tables
    fork
      begin core_run(0, 250); core_fetch(0); end
      begin core_run(1, 250); core_fetch(1); end
      begin core_run(2, 250); core_fetch(2); end
      begin core_run(3, 250); core_fetch(3); end
    join
    // code page translated through the data port first -> ITLB miss, L2 TLB hit
    begin
      bit f; logic [63:0] r; int h0;
      @(negedge clk); flush = 1; @(negedge clk); flush = 0;
      access(1, 1, {CODE_VPN, 12'h010}, 0, 0, f, r);
      h0 = c_l2tlb_hit;
      access(1, 0, {CODE_VPN, 12'h018}, 0, 0, f, r);
      #1 check(!f && r == ref_mem[(CODE_PFN << 12) + 24] && c_l2tlb_hit == h0 + 1,
               "instruction translation served by the L2 TLB");
      // faults: unmapped page, store to the read-only code page
      access(2, 1, 48'h0000_dead_0000, 0, 0, f, r);
      check(f, "unmapped page faults");
      access(3, 1, {CODE_VPN, 12'h000}, 1, 64'h5, f, r);
      check(f, "store to read-only page faults");
    end

    // phase 2: conventional 4-level tables, flattening disabled
    @(negedge clk); flush = 1; cr3_base = PA_W'(CR3_CONV); cr3_flat_en = 0;
    @(negedge clk); flush = 0;
    fork
      core_run(0, 60);
      core_run(1, 60);
      core_run(2, 60);
      core_run(3, 60);
    join

    #1;
    $display("events: l1tlb_miss=%0d l2tlb_hit=%0d walks=%0d (3-read %0d, 4-read %0d) pwc_hits=%0d",
             c_l1tlb_miss, c_l2tlb_hit, c_walk, c_walk3, c_walk4, c_pwc_hit);
    $display("events: metadata_bypass=%0d l1_hit=%0d l1_miss=%0d faults=%0d remote_mem_req=%0d",
             c_meta, c_l1_hit, c_l1_miss, c_fault, c_remote);
    check(c_l1tlb_miss > 0, "no L1 TLB miss happened");
    check(c_l2tlb_hit > 0, "no L2 TLB hit happened");
    check(c_walk > 0, "no page walk happened");
    check(c_walk3 > 0, "no 3-access (flattened) walk happened");
    check(c_walk4 > 0, "no 4-access (conventional) walk happened");
    check(c_pwc_hit > 0, "no PWC hit happened");
    check(c_meta > 0, "no metadata bypass request happened");
    check(c_l1_hit > 0, "no L1 hit happened");
    check(c_l1_miss > 0, "no L1 miss happened");
    check(c_fault >= 2, "faults did not happen");
    check(c_remote > 0, "no remote memory request happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
