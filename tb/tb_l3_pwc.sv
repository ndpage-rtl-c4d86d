// tb_l3_pwc: self-checking testbench of the L3 page walk cache (pwc with 18-bit keys,
// 16 entries).
//
// It fills the cache with distinct random keys and PTEs (kept in a reference
// table), checks every lookup hits with the right PTE in the same cycle,
// checks that one more fill evicts exactly one entry, that a refill of a
// present key updates it, that an absent key misses, and that flush clears
// all entries.
module tb_l3_pwc;
  import ndp_pkg::*;
  localparam int unsigned KW = 18, ENT = 16;

  logic clk = 0, rst_n = 0, flush = 0;
  logic [KW-1:0] lookup_key = '0, fill_key = '0;
  logic lookup_hit, fill_valid = 0;
  pte_t lookup_pte, fill_pte = '0;
  int checks = 0, failures = 0;

  pwc #(.KEY_W(KW), .ENTRIES(ENT)) dut (.*);

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

  task automatic fill(input logic [KW-1:0] k, input pte_t p);
    @(negedge clk); fill_valid = 1; fill_key = k; fill_pte = p;
    @(negedge clk); fill_valid = 0;
  endtask

  logic [KW-1:0] keys [ENT+1];
  pte_t          ptes [ENT+1];

  function automatic bit present(input logic [KW-1:0] k, input int upto);
    for (int j = 0; j < upto; j++) if (keys[j] == k) return 1;
    return 0;
  endfunction

  initial begin
    int hits;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i <= ENT; i++) begin
      logic [KW-1:0] k;
      do k = KW'({$urandom(), $urandom()}); while (present(k, i));
      keys[i] = k;
      ptes[i] = {$urandom(), $urandom()};
    end
    @(negedge clk); lookup_key = keys[0]; #1;
    check(!lookup_hit, "empty PWC hit");
    for (int i = 0; i < ENT; i++) fill(keys[i], ptes[i]);
    for (int i = 0; i < ENT; i++) begin
      lookup_key = keys[i]; #1;
      check(lookup_hit && lookup_pte == ptes[i], $sformatf("entry %0d", i));
    end
    lookup_key = keys[ENT]; #1;
    check(!lookup_hit, "absent key hit");
    fill(keys[ENT], ptes[ENT]);
    lookup_key = keys[ENT]; #1;
    check(lookup_hit && lookup_pte == ptes[ENT], "new entry after eviction");
    hits = 0;
    for (int i = 0; i < ENT; i++) begin
      lookup_key = keys[i]; #1;
      if (lookup_hit) hits++;
    end
    check(hits == ENT - 1, $sformatf("%0d old entries left, expected %0d", hits, ENT - 1));
    fill(keys[ENT], 64'hDEAD_BEEF_0000_1234);
    lookup_key = keys[ENT]; #1;
    check(lookup_hit && lookup_pte == 64'hDEAD_BEEF_0000_1234, "refill update");
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    hits = 0;
    for (int i = 0; i <= ENT; i++) begin
      lookup_key = keys[i]; #1;
      if (lookup_hit) hits++;
    end
    check(hits == 0, "entries survive flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
