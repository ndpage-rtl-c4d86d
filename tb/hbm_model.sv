// hbm_model: behavioural model of the HBM2 stack behind the memory
// controllers, for simulation only (not synthesizable: associative-array
// storage and tasks).
//
// NPORT independent ports, one per memory controller, share one sparse
// storage of 64-bit words (unwritten words read as zero, i.e. not-present
// PTEs). Each port takes one line request at a time (req_ready low while
// busy), answers LAT cycles after accepting it, and holds rsp_valid until
// rsp_ready. A write applies its byte strobe and returns an acknowledgement.
// The response echoes the request's src as dst and its tag.
//
// Testbench tasks: write64/read64 for direct access, and map_page, which
// builds x86-64 style page tables rooted at cr3, allocating tables from a
// bump allocator. With flat=1 the PL3 entry points to a 2 MB flattened
// PL2/PL1 node (flattened-node bit 9 set) indexed with VA[29:12]; with
// flat=0 it builds conventional PL2 and PL1 tables. reads counts the line
// reads served.
module hbm_model
  import ndp_pkg::*;
#(
  parameter int unsigned NPORT = 1,
  parameter int unsigned LAT   = 20
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid [NPORT],
  output logic     req_ready [NPORT],
  input  mem_req_t req       [NPORT],
  output logic     rsp_valid [NPORT],
  input  logic     rsp_ready [NPORT],
  output mem_rsp_t rsp       [NPORT]
);
  logic [63:0] mem [longint unsigned];
  longint unsigned next_tbl = 64'h1_0000_0000;   // page-table area starts at 4 GB
  int reads = 0;
  int writes = 0;

  function automatic logic [63:0] read64(input longint unsigned a);
    longint unsigned k = a >> 3;
    return mem.exists(k) ? mem[k] : 64'd0;
  endfunction

  function automatic void write64(input longint unsigned a, input logic [63:0] d);
    mem[a >> 3] = d;
  endfunction

  function automatic longint unsigned alloc(input longint unsigned bytes);
    longint unsigned a;
    next_tbl = (next_tbl + bytes - 1) & ~(bytes - 1);
    a = next_tbl;
    next_tbl += bytes;
    return a;
  endfunction

  // entry of a table at 'base' with index 'idx'; allocates the next table if absent
  function automatic longint unsigned next_level(input longint unsigned base, input int idx,
                                                 input longint unsigned bytes, input bit flat);
    logic [63:0] e = read64(base + longint'(idx) * 8);
    if (!e[0]) begin
      longint unsigned t = alloc(bytes);
      e = t | 64'h3 | (flat ? 64'h200 : 64'h0);
      write64(base + longint'(idx) * 8, e);
    end
    return e & 64'h000F_FFFF_FFFF_F000;
  endfunction

  function automatic void map_page(input longint unsigned cr3, input logic [35:0] vpn,
                                   input longint unsigned pfn, input bit writable, input bit flat);
    longint unsigned b3, b21, b1;
    b3 = next_level(cr3, int'(vpn[35:27]), 4096, 0);
    if (flat) begin
      b21 = next_level(b3, int'(vpn[26:18]), 2 * 1024 * 1024, 1);
      write64(b21 + longint'(vpn[17:0]) * 8, (pfn << 12) | 64'h1 | (writable ? 64'h2 : 64'h0));
    end else begin
      b21 = next_level(b3, int'(vpn[26:18]), 4096, 0);
      b1  = next_level(b21, int'(vpn[17:9]), 4096, 0);
      write64(b1 + longint'(vpn[8:0]) * 8, (pfn << 12) | 64'h1 | (writable ? 64'h2 : 64'h0));
    end
  endfunction

  for (genvar p = 0; p < NPORT; p++) begin : g_port
    logic     busy = 0;
    int       cnt = 0;
    mem_req_t cur;
    assign req_ready[p] = !busy;
    always @(posedge clk) begin
      if (!rst_n) begin
        busy         <= 0;
        rsp_valid[p] <= 0;
        rsp[p]       <= '0;
      end else if (!busy) begin
        if (req_valid[p]) begin
          busy <= 1;
          cnt  <= 1;
          cur  <= req[p];
        end
      end else if (rsp_valid[p]) begin
        if (rsp_ready[p]) begin
          rsp_valid[p] <= 0;
          busy         <= 0;
        end
      end else if (cnt < LAT - 1) begin
        cnt <= cnt + 1;
      end else begin
        mem_rsp_t r;
        longint unsigned base;
        logic [63:0] d;
        base = longint'(cur.addr) & ~64'h3F;
        r.dst = cur.src;
        r.tag = cur.tag;
        r.rdata = '0;
        if (cur.we) begin
          for (int w = 0; w < 8; w++) begin
            d = read64(base + w * 8);
            for (int b = 0; b < 8; b++)
              if (cur.wstrb[w*8+b]) d[b*8 +: 8] = cur.wdata[w*64 + b*8 +: 8];
            write64(base + w * 8, d);
          end
          writes++;
        end else begin
          for (int w = 0; w < 8; w++) r.rdata[w*64 +: 64] = read64(base + w * 8);
          reads++;
        end
        rsp[p]       <= r;
        rsp_valid[p] <= 1;
      end
    end
  end
endmodule
