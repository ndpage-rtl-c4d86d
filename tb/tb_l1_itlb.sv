// tb_l1_itlb: self-checking testbench of the L1 instruction TLB (tlb_sa at the paper's
// size: 128 entries, 4 ways, 1-cycle lookup).
//
// It fills every way of every set with distinct random translations, kept in
// a reference table, and checks that each one hits with the right frame
// number; that one more fill into a full set evicts exactly one entry; that a
// refill of a present page updates it in place; that a flush empties the
// TLB; and that every lookup answers exactly 1 cycle(s) after it was
// accepted.
module tb_l1_itlb;
  import ndp_pkg::*;
  localparam int unsigned SETS = 32, WAYS = 4, LAT = 1;

  logic clk = 0, rst_n = 0, flush = 0;
  logic req_valid = 0, req_ready, resp_valid, resp_hit, fill_valid = 0;
  vpn_t req_vpn = '0, fill_vpn = '0;
  xlat_t resp_xlat, fill_xlat = '0;
  int checks = 0, failures = 0;

  tlb_sa #(.SETS(SETS), .WAYS(WAYS), .LATENCY(LAT)) dut (.*);

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
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic fill(input vpn_t v, input xlat_t x);
    @(negedge clk);
    fill_valid = 1; fill_vpn = v; fill_xlat = x;
    @(negedge clk);
    fill_valid = 0;
  endtask

  // one lookup; returns hit and data, checks the latency
  task automatic lookup(input vpn_t v, output bit hit, output xlat_t x);
    int cyc;
    @(negedge clk);
    req_valid = 1; req_vpn = v;
    while (!req_ready) @(negedge clk);
    @(posedge clk);
    #1 req_valid = 0;
    cyc = 0;
    while (!resp_valid) begin
      @(posedge clk); #1;
      cyc++;
    end
    cyc++;
    hit = resp_hit; x = resp_xlat;
    check(cyc == LAT, $sformatf("lookup latency %0d, expected %0d", cyc, LAT));
    @(posedge clk);
  endtask

  vpn_t  vpns [SETS*WAYS];
  xlat_t xls  [SETS*WAYS];

  initial begin
    bit h;
    xlat_t x;
    int hits;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // empty TLB misses
    lookup(36'h123456789, h, x);
    check(!h, "empty TLB hit");
    // fill every way of every set: way w of set s gets vpn {w+1, random, s}
    for (int s = 0; s < SETS; s++)
      for (int w = 0; w < WAYS; w++) begin
        vpn_t v;
        v = vpn_t'({$urandom(), $urandom()});
        v = (v & ~vpn_t'(SETS - 1)) | vpn_t'(s);
        v[35:32] = 4'(w + 1);
        vpns[s*WAYS+w] = v;
        xls[s*WAYS+w]  = '{pfn: pfn_t'($urandom()), writable: 1'($urandom())};
        fill(v, xls[s*WAYS+w]);
      end
    foreach (vpns[i]) begin
      lookup(vpns[i], h, x);
      check(h && x == xls[i], $sformatf("entry %0d: hit=%0d pfn=%h exp %h", i, h, x.pfn, xls[i].pfn));
    end
    // one extra translation in full set 1 evicts exactly one of the old ones
    begin
      vpn_t v = vpn_t'(36'hF00000000) | vpn_t'(1 % SETS);
      fill(v, '{pfn: 22'h2AAAA, writable: 1'b1});
      lookup(v, h, x);
      check(h && x.pfn == 22'h2AAAA, "new entry in full set");
      hits = 0;
      for (int w = 0; w < WAYS; w++) begin
        lookup(vpns[(1 % SETS)*WAYS+w], h, x);
        if (h) hits++;
      end
      check(hits == WAYS - 1, $sformatf("after eviction %0d old entries hit, expected %0d", hits, WAYS - 1));
    end
    // refill of a present page updates in place
    fill(vpns[0], '{pfn: 22'h15555, writable: 1'b0});
    lookup(vpns[0], h, x);
    check(h && x.pfn == 22'h15555 && !x.writable, "refill update");
    // flush
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    hits = 0;
    for (int i = 0; i < SETS*WAYS; i += 7) begin
      lookup(vpns[i], h, x);
      if (h) hits++;
    end
    check(hits == 0, "entries survive flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
