// Co-tagged translation structure: the common body of the L1 TLB, the L2 TLB,
// the nested TLB (nTLB) and the paging-structure MMU cache.
//
// Each entry holds a valid bit, a lookup key, a value and a co-tag.  The valid
// bit is the entry's coherence state: set means Shared, clear means Invalid;
// translation structures are read-only, so no other state is needed.  The
// co-tag is the low part (bits 19:3) of the system physical address of the
// nested page table entry the translation came from, written by the page table
// walker on a fill.  A coherence message names a 64-byte line; every valid
// entry whose co-tag bits 19:6 equal that line's address bits 19:6 is
// invalidated, so the eight entries of a line, and any aliases of the
// shortened co-tag, are dropped together.  All of that follows the paper.
//
// This design's own choices: set-associative organisation with WAYS ways
// (WAYS = ENTRIES gives a fully associative structure), set index taken from
// the low key bits, an invalid way is filled first and otherwise a per-set
// round-robin pointer picks the victim, a fill whose key is already present
// overwrites that entry.
//
// Timing: lookup and the co-tag match (inv_match) are combinational; fills,
// invalidations and flushes take effect at the next rising clock edge.  When
// a fill and a matching invalidation meet in the same cycle the fill is
// dropped, so a stale translation is never installed.
module xlat_cache
  import hatric_pkg::*;
#(
  parameter int unsigned ENTRIES = 64,
  parameter int unsigned WAYS    = 4,
  parameter int unsigned KEY_W   = VPN_W,
  parameter int unsigned VAL_W   = PFN_W
) (
  input  logic                clk,
  input  logic                rst_n,
  // lookup
  input  logic [KEY_W-1:0]    lk_key,
  output logic                lk_hit,
  output logic [VAL_W-1:0]    lk_val,
  output cotag_t              lk_cotag,
  // fill from the page table walker
  input  logic                fill_en,
  input  logic [KEY_W-1:0]    fill_key,
  input  logic [VAL_W-1:0]    fill_val,
  input  cotag_t              fill_cotag,
  // coherence invalidation by co-tag
  input  logic                inv_en,
  input  cotag_line_t         inv_line,
  output logic                inv_match,
  // invalidate everything
  input  logic                flush
);

  localparam int unsigned SETS  = ENTRIES / WAYS;
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef struct packed {
    logic [KEY_W-1:0] key;
    logic [VAL_W-1:0] val;
    cotag_t           cotag;
  } entry_t;

  logic   vld  [SETS][WAYS];
  entry_t ent  [SETS][WAYS];
  logic [WAY_W-1:0] rr [SETS];

  function automatic logic [SET_W-1:0] set_of(input logic [KEY_W-1:0] k);
    if (SETS > 1) return k[SET_W-1:0];
    else          return '0;
  endfunction

  // ---------------- lookup ----------------
  always_comb begin
    logic [SET_W-1:0] s;
    s        = set_of(lk_key);
    lk_hit   = 1'b0;
    lk_val   = '0;
    lk_cotag = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (vld[s][w] && ent[s][w].key == lk_key) begin
        lk_hit   = 1'b1;
        lk_val   = ent[s][w].val;
        lk_cotag = ent[s][w].cotag;
      end
    end
  end

  // ---------------- co-tag match ----------------
  logic match [SETS][WAYS];
  always_comb begin
    inv_match = 1'b0;
    for (int s = 0; s < SETS; s++)
      for (int w = 0; w < WAYS; w++) begin
        match[s][w] = inv_en && vld[s][w] &&
                      (ent[s][w].cotag[COTAG_W-1 -: COTAG_LINE_W] == inv_line);
        if (match[s][w]) inv_match = 1'b1;
      end
  end

  // ---------------- fill way selection ----------------
  logic [SET_W-1:0] fs;
  logic [WAY_W-1:0] fway;
  logic             fill_ok;
  always_comb begin
    logic found;
    fs    = set_of(fill_key);
    found = 1'b0;
    fway  = rr[fs];
    for (int w = 0; w < WAYS; w++)
      if (!found && vld[fs][w] && ent[fs][w].key == fill_key) begin
        found = 1'b1;
        fway  = WAY_W'(w);
      end
    for (int w = 0; w < WAYS; w++)
      if (!found && !vld[fs][w]) begin
        found = 1'b1;
        fway  = WAY_W'(w);
      end
    fill_ok = fill_en && !flush &&
              !(inv_en && fill_cotag[COTAG_W-1 -: COTAG_LINE_W] == inv_line);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        rr[s] <= '0;
        for (int w = 0; w < WAYS; w++) vld[s][w] <= 1'b0;
      end
    end else begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++)
          if (flush || match[s][w]) vld[s][w] <= 1'b0;
      if (fill_ok) begin
        vld[fs][fway] <= 1'b1;
        ent[fs][fway] <= '{key: fill_key, val: fill_val, cotag: fill_cotag};
        if (fway == rr[fs]) rr[fs] <= (WAYS > 1) ? WAY_W'((32'(rr[fs]) + 1) % WAYS) : '0;
      end
    end
  end

endmodule
