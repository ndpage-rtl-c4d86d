// ndp_pkg: types and constants shared by the NDP address-translation and
// memory-access RTL.
//
// Virtual addresses are 48-bit x86-64 addresses split as in the flattened
// page table: PL4 index VA[47:39], PL3 index VA[38:30], flattened PL2/PL1
// index VA[29:12] (18 bits, 2^18 entries per 2 MB node), page offset VA[11:0].
// The conventional PL2 index is VA[29:21] and PL1 index VA[20:12]; the walker
// still understands that layout for nodes that are not flattened.
//
// Physical addresses are 34 bits (16 GB of HBM2 per stack). Memory traffic is
// carried in whole 64-byte lines (512-bit, the mesh link width): reads return
// a line, writes carry a line plus a 64-bit byte-strobe.
//
// Page-table entries follow x86-64: bit 0 present, bit 1 writable, bits
// [51:12] the next-level table or page frame. The single bit that marks a
// flattened PL2/PL1 node is kept in bit 9 (one of the software-available bits);
// that bit position is this design's choice.
package ndp_pkg;

  localparam int unsigned VA_W     = 48;
  localparam int unsigned PA_W     = 34;
  localparam int unsigned PAGE_OFF = 12;
  localparam int unsigned VPN_W    = VA_W - PAGE_OFF;   // 36
  localparam int unsigned PFN_W    = PA_W - PAGE_OFF;   // 22
  localparam int unsigned LINE_B   = 64;
  localparam int unsigned LINE_W   = LINE_B * 8;        // 512
  localparam int unsigned LINE_OFF = 6;
  localparam int unsigned WORD_W   = 64;
  localparam int unsigned NODE_W   = 3;                 // up to 8 NDP cores
  localparam int unsigned TAG_W    = 2;                 // memory request source tag

  // Memory request source tags inside one NDP core node
  localparam logic [TAG_W-1:0] SRC_L1I = 2'd0;
  localparam logic [TAG_W-1:0] SRC_L1D = 2'd1;
  localparam logic [TAG_W-1:0] SRC_PTW = 2'd2;

  // PTE bit positions
  localparam int unsigned PTE_P    = 0;
  localparam int unsigned PTE_RW   = 1;
  localparam int unsigned PTE_FLAT = 9;

  typedef logic [VA_W-1:0]  vaddr_t;
  typedef logic [PA_W-1:0]  paddr_t;
  typedef logic [VPN_W-1:0] vpn_t;
  typedef logic [PFN_W-1:0] pfn_t;
  typedef logic [63:0]      pte_t;
  typedef logic [LINE_W-1:0] line_t;

  // Line-granular memory request (cache fill, write-through, PTE fetch)
  typedef struct packed {
    logic [NODE_W-1:0] src;    // requesting node (filled in at the node)
    logic [TAG_W-1:0]  tag;    // requester inside the node
    logic              we;
    paddr_t            addr;   // line aligned for reads
    line_t             wdata;
    logic [LINE_B-1:0] wstrb;
  } mem_req_t;

  typedef struct packed {
    logic [NODE_W-1:0] dst;    // node that issued the request
    logic [TAG_W-1:0]  tag;
    line_t             rdata;
  } mem_rsp_t;

  // Translation result held in the TLBs and returned by the walker
  typedef struct packed {
    pfn_t pfn;
    logic writable;
  } xlat_t;

  // Page-table base of a PTE, as a physical address
  function automatic paddr_t pte_base(input pte_t e);
    return {e[PA_W-1:PAGE_OFF], {PAGE_OFF{1'b0}}};
  endfunction

  // 64-bit word of a line selected by a byte address
  function automatic logic [63:0] line_word(input line_t l, input logic [2:0] w);
    return l[w*64 +: 64];
  endfunction

endpackage
