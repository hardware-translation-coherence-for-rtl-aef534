// Shared types and constants for the translation-coherence system.
//
// Addresses follow x86-64: 48-bit guest virtual addresses, 4 KB pages, four
// radix levels of 9 bits, 8-byte page table entries, 64-byte cache lines
// holding 8 entries each.  A page table entry uses bit 0 as present, bit 5 as
// accessed and bits PA_W-1:12 as the frame number.  The co-tag of a
// translation entry is bits 19:3 of the system physical address of the
// nested leaf (nL1) entry the walker used; a coherence message names a
// 64-byte line, so only co-tag bits 19:6 take part in the match and all
// eight entries of a line are invalidated together.
//
// The message types below are this design's own encoding of the
// directory-based MESI protocol; the paper names the protocol but no wire
// format.
package hatric_pkg;

  localparam int unsigned PA_W       = 52;            // system/guest physical address bits
  localparam int unsigned VA_W       = 48;            // guest virtual address bits
  localparam int unsigned PAGE_BITS  = 12;
  localparam int unsigned LINE_BITS  = 6;             // 64-byte lines
  localparam int unsigned LINE_W     = 512;           // line data bits
  localparam int unsigned LADDR_W    = PA_W - LINE_BITS;  // line address bits
  localparam int unsigned PFN_W      = PA_W - PAGE_BITS;  // frame number bits
  localparam int unsigned VPN_W      = VA_W - PAGE_BITS;  // 36-bit guest virtual page
  localparam int unsigned COTAG_MSB  = 19;
  localparam int unsigned COTAG_LSB  = 3;
  localparam int unsigned COTAG_W    = COTAG_MSB - COTAG_LSB + 1;  // 17
  // co-tag bits compared with a line address: address bits 19:6
  localparam int unsigned COTAG_LINE_W = COTAG_MSB - LINE_BITS + 1; // 14

  localparam int unsigned PTE_P = 0;  // present bit
  localparam int unsigned PTE_A = 5;  // accessed bit

  typedef logic [PA_W-1:0]    paddr_t;
  typedef logic [LADDR_W-1:0] laddr_t;
  typedef logic [PFN_W-1:0]   pfn_t;
  typedef logic [VPN_W-1:0]   vpn_t;
  typedef logic [COTAG_W-1:0] cotag_t;
  typedef logic [COTAG_LINE_W-1:0] cotag_line_t;
  typedef logic [LINE_W-1:0]  line_t;

  // page-table kind of a line, as kept in the directory entry
  typedef struct packed {
    logic gpt;   // line holds guest page table entries
    logic npt;   // line holds nested page table entries
  } ptkind_t;

  // CPU -> directory requests
  typedef enum logic [2:0] {
    REQ_GETS = 3'd0,   // read miss
    REQ_GETM = 3'd1,   // write miss or upgrade
    REQ_PUTS = 3'd2,   // clean eviction (S or E)
    REQ_PUTM = 3'd3,   // dirty eviction with data
    REQ_MARK = 3'd4    // walker found accessed bit clear: set gPT/nPT bit
  } req_type_e;

  typedef struct packed {
    req_type_e typ;
    laddr_t    addr;
    ptkind_t   ptk;     // walker reads and marks carry the page-table kind
    line_t     data;    // PUTM only
  } cpu_req_t;

  // directory -> CPU grants (answer to GETS/GETM/MARK)
  typedef enum logic [1:0] {
    GNT_S   = 2'd0,
    GNT_E   = 2'd1,
    GNT_M   = 2'd2,
    GNT_ACK = 2'd3    // MARK done, no data
  } gnt_type_e;

  typedef struct packed {
    gnt_type_e typ;
    line_t     data;
  } dir_rsp_t;

  // directory -> CPU snoops
  typedef enum logic [0:0] {
    SNP_INV  = 1'b0,  // invalidate (GETM of another CPU, or back-invalidation)
    SNP_DOWN = 1'b1   // owner must downgrade to S and supply data
  } snp_type_e;

  typedef struct packed {
    snp_type_e typ;
    laddr_t    addr;
    logic      pt;    // line is a page-table line: relay to translation structures
  } snoop_t;

  typedef struct packed {
    logic  l1_hit;    // the L1 held the line
    logic  xl_hit;    // a translation structure entry matched the co-tag
    logic  dirty;     // data is returned (line was M)
    line_t data;
  } snoop_ack_t;

  // guest virtual page index at radix level lvl (4 = root ... 1 = leaf)
  function automatic logic [8:0] vpn_idx(input vpn_t vpn, input int unsigned lvl);
    return vpn[9*(lvl-1) +: 9];
  endfunction

  // co-tag of the page table entry at system physical address a
  function automatic cotag_t cotag_of(input paddr_t a);
    return a[COTAG_MSB:COTAG_LSB];
  endfunction

  // co-tag bits a coherence message for line la is compared with
  function automatic cotag_line_t cotag_line_of(input laddr_t la);
    return la[COTAG_MSB-LINE_BITS:0];
  endfunction

endpackage
