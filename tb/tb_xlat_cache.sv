// Self-checking test of the co-tagged translation structure.
// Fills translations with known co-tags, then checks: lookups return what was
// filled; an invalidation naming a 64-byte line drops every entry whose co-tag
// lies in that line (bits 5:3 ignored) and nothing else, and reports the match
// in the same cycle; a message for a line nothing came from reports no match;
// a fill meeting a matching invalidation in the same cycle is not installed;
// a full set evicts one entry on the next fill; flush empties the structure.
module tb_xlat_cache;
  import hatric_pkg::*;

  localparam int unsigned ENTRIES = 64;
  localparam int unsigned WAYS    = 4;
  localparam int unsigned SETS    = ENTRIES / WAYS;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  vpn_t        lk_key, fill_key;
  logic        lk_hit, fill_en, inv_en, inv_match, flush;
  pfn_t        lk_val, fill_val;
  cotag_t      lk_cotag, fill_cotag;
  cotag_line_t inv_line;

  int checks = 0, failures = 0;

  xlat_cache #(.ENTRIES(ENTRIES), .WAYS(WAYS), .KEY_W(VPN_W), .VAL_W(PFN_W)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic fill(input vpn_t k, input pfn_t v, input paddr_t pte_addr);
    @(negedge clk);
    fill_en = 1'b1; fill_key = k; fill_val = v; fill_cotag = cotag_of(pte_addr);
    @(negedge clk);
    fill_en = 1'b0;
  endtask

  task automatic probe(input vpn_t k, output bit h, output pfn_t v);
    lk_key = k;
    #1;
    v = lk_val;
    h = lk_hit;
  endtask

  // key i goes to set i % SETS; its nested entry sits at 0x10000 + 8*i
  function automatic paddr_t pte_of(input int i);
    return paddr_t'(32'h0001_0000 + 8 * i);
  endfunction

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pfn_t v;
    bit   h;
    fill_en = 0; inv_en = 0; flush = 0; lk_key = '0; fill_key = '0; fill_val = '0;
    fill_cotag = '0; inv_line = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // empty after reset
    probe(36'h5, h, v);
    check(!h, "empty after reset");

    // 32 translations, all in distinct lines of 8 entries except i and i^1 share
    for (int i = 0; i < 32; i++) fill(vpn_t'(i), pfn_t'(1000 + i), pte_of(i));
    for (int i = 0; i < 32; i++) begin
      probe(vpn_t'(i), h, v);
      check(h && v == pfn_t'(1000 + i), $sformatf("lookup %0d", i));
    end

    // invalidate the line holding entries 8..15 (address 0x10040)
    @(negedge clk);
    inv_en = 1'b1; inv_line = cotag_line_of(laddr_t'(pte_of(8) >> LINE_BITS));
    #1;
    check(inv_match, "match reported for a cached line");
    @(negedge clk);
    inv_en = 1'b0;
    for (int i = 0; i < 32; i++) begin
      probe(vpn_t'(i), h, v);
      if (i >= 8 && i < 16) check(!h, $sformatf("entry %0d of the line dropped", i));
      else                  check(h && v == pfn_t'(1000 + i), $sformatf("entry %0d kept", i));
    end

    // a line nothing came from: no match, nothing lost
    @(negedge clk);
    inv_en = 1'b1; inv_line = cotag_line_of(laddr_t'(32'h0002_0400 >> LINE_BITS));
    #1;
    check(!inv_match, "no match for an unrelated line");
    @(negedge clk);
    inv_en = 1'b0;
    probe(vpn_t'(0), h, v);
    check(h, "unrelated invalidation kept entries");

    // aliasing: co-tags keep bits 19:3 only, so 0x10000 + 1MB aliases with entry 0..7
    @(negedge clk);
    inv_en = 1'b1; inv_line = cotag_line_of(laddr_t'((32'h0001_0000 + 32'h0010_0000) >> LINE_BITS));
    #1;
    check(inv_match, "alias of a co-tag matches");
    @(negedge clk);
    inv_en = 1'b0;
    probe(vpn_t'(3), h, v);
    check(!h, "aliased entry dropped");

    // fill meeting a matching invalidation in the same cycle is not installed
    @(negedge clk);
    fill_en = 1'b1; fill_key = 36'h777; fill_val = 40'h777; fill_cotag = cotag_of(paddr_t'(32'h3000));
    inv_en = 1'b1; inv_line = cotag_line_of(laddr_t'(32'h3000 >> LINE_BITS));
    @(negedge clk);
    fill_en = 1'b0; inv_en = 1'b0;
    probe(36'h777, h, v);
    check(!h, "racing fill dropped");

    // refill of an existing key overwrites it
    fill(vpn_t'(20), pfn_t'(5555), pte_of(20));
    probe(vpn_t'(20), h, v);
    check(h && v == pfn_t'(5555), "overwrite of existing key");

    // fill WAYS+1 keys of one set: exactly one is evicted
    for (int k = 0; k <= WAYS; k++) fill(vpn_t'(32'h100 + SETS * k), pfn_t'(k), paddr_t'(32'h8000 + 64 * k));
    begin
      int present = 0;
      for (int k = 0; k <= WAYS; k++) begin probe(vpn_t'(32'h100 + SETS * k), h, v); if (h) present++; end
      check(present == WAYS, $sformatf("set holds %0d of %0d", present, WAYS));
    end

    // flush
    @(negedge clk);
    flush = 1'b1;
    @(negedge clk);
    flush = 1'b0;
    begin
      int present = 0;
      for (int i = 0; i < 32; i++) begin probe(vpn_t'(i), h, v); if (h) present++; end
      check(present == 0, "flush empties the structure");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
