// tb_ndp_workloads: the two access patterns of the evaluated data-intensive
// workloads, run on the whole logic layer at its default size (2x2 mesh, four
// cores) with an HBM model behind the four controllers.
//
//  * Random access (GUPS-like): each core reads and updates random words of
//    256 pages scattered over a 4 GB virtual region, so almost every access
//    misses in the TLBs and walks touch four different flattened nodes.
//  * Pointer chasing (graph-like): each core follows a linked chain of 160
//    nodes placed in random pages; the address of the next load is the data
//    returned by the previous one, so every walk stalls the core.
//
// Each pattern runs twice with the same address sequence: once under
// flattened PL2/PL1 tables (walks of 3 levels) and once, after a flush,
// under conventional 4-level tables with flattening disabled (4 levels). The
// data of every load is checked. The testbench checks that flattened walks
// visit 3 levels and conventional ones 4 (a level is a PWC hit or a memory
// read), that every PTE read
// appears as a bypass request, and that the flattened run is faster. The
// cycle counts and reads per walk are printed for both runs.
//
// The data sets are scaled far below the evaluated 8-10 GB: only the touched
// words are stored in the memory model, but the virtual footprint (4 GB for
// the random pattern) is large enough for TLB reach to be irrelevant.
module tb_ndp_workloads;
  import ndp_pkg::*;
  localparam int unsigned N = 4;
  localparam int unsigned PAGES = 256;
  localparam int unsigned RND_OPS = 160;
  localparam int unsigned CHAIN = 160;
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

  // per-phase counters, cleared at the start of each run
  int c_walk = 0, c_walk3 = 0, c_walk4 = 0, c_walk_rd = 0, c_meta = 0, c_pwc = 0;
  always @(posedge clk) begin
    for (int n = 0; n < N; n++) begin
      if (ev_walk_done[n]) begin
        c_walk++;
        c_walk_rd += int'(ev_walk_mem_acc[n]);
        c_pwc += int'(ev_walk_pwc_hits[n]);
        // levels visited = memory reads + PWC hits
        if (int'(ev_walk_mem_acc[n]) + int'(ev_walk_pwc_hits[n]) == 3) c_walk3++;
        if (int'(ev_walk_mem_acc[n]) + int'(ev_walk_pwc_hits[n]) == 4) c_walk4++;
      end
      if (ev_meta_req[n]) c_meta++;
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic access(input int n, input vaddr_t va, input bit we,
                        input logic [63:0] wd, output bit f, output logic [63:0] rd);
    @(negedge clk);
    core_req_valid[n][1] = 1; core_req_vaddr[n][1] = va; core_req_we[n][1] = we;
    core_req_wdata[n][1] = wd; core_req_wstrb[n][1] = 8'hFF; core_req_nc[n][1] = 0;
    while (!core_req_ready[n][1]) @(negedge clk);
    @(posedge clk); #1 core_req_valid[n][1] = 0;
    while (!core_resp_valid[n][1]) begin @(posedge clk); #1; end
    f = core_resp_fault[n][1]; rd = core_resp_rdata[n][1];
    @(posedge clk); #1;
  endtask

  // Core n owns pages vpn_tab[n][i], scattered over the 4 GB region starting
  // at VA 0x10_0000_0000 (VPN 0x100_0000); frames are 0x2000 + n*PAGES + i.
  logic [35:0]     vpn_tab [N][PAGES];
  longint unsigned pfn_tab [N][PAGES];
  // random pattern: (page, word, is_store, data) per operation
  int          r_pg [N][RND_OPS], r_w [N][RND_OPS];
  bit          r_we [N][RND_OPS];
  logic [63:0] r_wd [N][RND_OPS];
  // chain pattern: node k lives in page c_pg, word c_w
  int          c_pg [N][CHAIN], c_w [N][CHAIN];
  logic [63:0] ref_mem [longint unsigned];
  logic [63:0] init_mem [longint unsigned];

  function automatic vaddr_t va_of(input int n, input int pg, input int w);
    return {vpn_tab[n][pg], 12'(w * 8)};
  endfunction
  function automatic longint unsigned pa_of(input int n, input int pg, input int w);
    return (pfn_tab[n][pg] << 12) + longint'(w * 8);
  endfunction

  task automatic run_random(input int n);
    for (int k = 0; k < RND_OPS; k++) begin
      automatic longint unsigned pa = pa_of(n, r_pg[n][k], r_w[n][k]);
      bit f; logic [63:0] r;
      access(n, va_of(n, r_pg[n][k], r_w[n][k]), r_we[n][k], r_wd[n][k], f, r);
      if (r_we[n][k]) begin
        check(!f, "random store faulted");
        ref_mem[pa] = r_wd[n][k];
      end else
        check(!f && r == ref_mem[pa], $sformatf("core %0d random load %0d", n, k));
    end
  endtask

  task automatic run_chain(input int n);
    automatic vaddr_t va = va_of(n, c_pg[n][0], c_w[n][0]);
    for (int k = 0; k < CHAIN - 1; k++) begin
      bit f; logic [63:0] r;
      access(n, va, 0, 0, f, r);
      check(!f && r == 64'(va_of(n, c_pg[n][k + 1], c_w[n][k + 1])),
            $sformatf("core %0d chain node %0d", n, k));
      va = vaddr_t'(r);
    end
  endtask

  // restore the memory image so both runs of a pattern see the same data
  task automatic reset_data();
    foreach (init_mem[a]) begin
      u_mem.write64(a, init_mem[a]);
      ref_mem[a] = init_mem[a];
    end
  endtask

  task automatic switch_tables(input bit flat);
    @(negedge clk);
    flush = 1;
    cr3_base = PA_W'(flat ? CR3_FLAT : CR3_CONV);
    cr3_flat_en = flat;
    @(negedge clk); flush = 0;
    c_walk = 0; c_walk3 = 0; c_walk4 = 0; c_walk_rd = 0; c_meta = 0; c_pwc = 0;
  endtask

  task automatic run_phase(input string name, input bit chain, input bit flat,
                           output longint cyc);
    longint t0;
    reset_data();
    switch_tables(flat);
    t0 = $time;
    fork
      if (chain) run_chain(0); else run_random(0);
      if (chain) run_chain(1); else run_random(1);
      if (chain) run_chain(2); else run_random(2);
      if (chain) run_chain(3); else run_random(3);
    join
    #1;
    cyc = ($time - t0) / 10;
    $display("%s %s: %0d cycles, %0d walks, %0d PTE reads (%0d.%02d per walk), %0d PWC hits",
             name, flat ? "flattened   " : "conventional", cyc, c_walk, c_walk_rd,
             c_walk_rd / (c_walk > 0 ? c_walk : 1),
             (c_walk_rd * 100 / (c_walk > 0 ? c_walk : 1)) % 100, c_pwc);
    check(c_walk > 0, {name, ": no page walks"});
    check(c_meta == c_walk_rd, {name, ": PTE reads and bypass requests differ"});
    if (flat) check(c_walk3 == c_walk, {name, ": flattened walk not of 3 levels"});
    else      check(c_walk4 == c_walk, {name, ": conventional walk not of 4 levels"});
  endtask

  initial begin
    longint t_flat, t_conv;
    for (int n = 0; n < N; n++)
      for (int p = 0; p < 2; p++) begin
        core_req_valid[n][p] = 0; core_req_vaddr[n][p] = '0; core_req_we[n][p] = 0;
        core_req_wdata[n][p] = '0; core_req_wstrb[n][p] = '0; core_req_nc[n][p] = 0;
      end
    // scattered pages: page i of core n lies in the (i % 4)-th gigabyte, at a
    // random 4 KB page inside it (bit pattern keeps the VPNs distinct)
    for (int n = 0; n < N; n++)
      for (int i = 0; i < PAGES; i++) begin
        automatic logic [35:0] v = 36'h100_0000 + 36'((i % 4) << 18)
                                   + 36'((($urandom() % 64) << 12) | (n << 8) | (i / 4));
        vpn_tab[n][i] = v;
        pfn_tab[n][i] = 64'h2000 + longint'(n * PAGES + i);
        u_mem.map_page(CR3_FLAT, v, pfn_tab[n][i], 1, 1);
        u_mem.map_page(CR3_CONV, v, pfn_tab[n][i], 1, 0);
      end
    // random operations and chain nodes, and the words they touch
    for (int n = 0; n < N; n++) begin
      for (int k = 0; k < RND_OPS; k++) begin
        r_pg[n][k] = $urandom() % PAGES;
        r_w[n][k]  = $urandom() % 512;
        r_we[n][k] = ($urandom() % 2) == 0;
        r_wd[n][k] = {$urandom(), $urandom()};
        init_mem[pa_of(n, r_pg[n][k], r_w[n][k])] = {32'hDA7A_0000 | 32'(n), $urandom()};
      end
      for (int k = 0; k < CHAIN; k++) begin
        // distinct pages along the chain, a different word in each
        c_pg[n][k] = (k * 97 + n * 13) % PAGES;
        c_w[n][k]  = ($urandom() % 511) + 1;
      end
      for (int k = 0; k < CHAIN - 1; k++)
        init_mem[pa_of(n, c_pg[n][k], c_w[n][k])] = 64'(va_of(n, c_pg[n][k + 1], c_w[n][k + 1]));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    run_phase("random access  ", 0, 1, t_flat);
    run_phase("random access  ", 0, 0, t_conv);
    check(t_flat < t_conv, "random access: flattened tables not faster");
    run_phase("pointer chasing", 1, 1, t_flat);
    run_phase("pointer chasing", 1, 0, t_conv);
    check(t_flat < t_conv, "pointer chasing: flattened tables not faster");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
