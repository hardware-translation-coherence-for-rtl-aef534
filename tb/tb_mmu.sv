// Self-checking test of the translation unit and its two-dimensional walker.
// A memory model answers the walker's reads from page tables built by
// tb_ptmem_pkg, two cycles after each request.  Expected system pages are
// worked out by walking the same tables in the test.  Checked: a cold walk
// makes 24 memory reads; a repeat hits in the L1 TLB one cycle after the
// request; a neighbour page reuses the MMU cache (1 guest read + 4 nested
// reads); a page evicted from the L1 TLB is found in the L2 TLB; a clear
// accessed bit produces a mark with the right page-table kind; an invalidation
// naming the line of the nested leaf entry matches and forces a new walk that
// returns the remapped page; an invalidation during a walk restarts it; an
// unmapped page faults.
module tb_mmu;
  import hatric_pkg::*;
  import tb_ptmem_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  pfn_t        gcr3_i, ncr3_i;
  logic        tr_valid, tr_ready, tr_rsp_valid, tr_rsp_fault;
  vpn_t        tr_gvp;
  pfn_t        tr_rsp_spp;
  logic [1:0]  tr_rsp_src;
  logic [4:0]  tr_rsp_refs;
  logic        mr_valid, mr_mark, mr_ready, mr_rsp_valid;
  paddr_t      mr_addr;
  ptkind_t     mr_ptk;
  logic [63:0] mr_rsp_data;
  logic        inv_en, inv_match, flush;
  cotag_line_t inv_line;

  mmu dut (
    .clk, .rst_n, .gcr3(gcr3_i), .ncr3(ncr3_i),
    .tr_valid, .tr_gvp, .tr_ready, .tr_rsp_valid, .tr_rsp_spp, .tr_rsp_fault,
    .tr_rsp_src, .tr_rsp_refs,
    .mr_valid, .mr_mark, .mr_addr, .mr_ptk, .mr_ready, .mr_rsp_valid, .mr_rsp_data,
    .inv_en, .inv_line, .inv_match, .flush
  );

  int checks = 0, failures = 0;
  int marks_g = 0, marks_n = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---- memory model: 2-cycle read latency, marks acknowledged the same way ----
  logic [1:0]  lat;
  logic        busy;
  paddr_t      a_q;
  logic        m_q;
  assign mr_ready = !busy;
  always_ff @(posedge clk) begin
    mr_rsp_valid <= 1'b0;
    if (!rst_n) begin
      busy <= 1'b0;
      lat  <= '0;
    end else if (!busy && mr_valid) begin
      busy <= 1'b1;
      lat  <= 2'd2;
      a_q  <= mr_addr;
      m_q  <= mr_mark;
      if (mr_mark) begin
        if (mr_ptk.gpt) marks_g++;
        if (mr_ptk.npt) marks_n++;
      end
    end else if (busy) begin
      if (lat == 2'd1) begin
        busy         <= 1'b0;
        mr_rsp_valid <= 1'b1;
        mr_rsp_data  <= m_q ? 64'h0 : rd(a_q);
      end
      lat <= lat - 2'd1;
    end
  end

  // translate and return the response; also the cycles from request to response
  task automatic translate(input vpn_t g, output pfn_t spp, output logic fault,
                           output logic [1:0] src, output int refs, output int cyc);
    @(negedge clk);
    while (!tr_ready) @(negedge clk);
    tr_valid = 1'b1;
    tr_gvp   = g;
    @(negedge clk);
    tr_valid = 1'b0;
    cyc = 1;
    while (!tr_rsp_valid) begin
      @(negedge clk);
      cyc++;
    end
    spp   = tr_rsp_spp;
    fault = tr_rsp_fault;
    src   = tr_rsp_src;
    refs  = int'(tr_rsp_refs);
  endtask

  task automatic invalidate(input paddr_t pte_addr, output logic m);
    @(negedge clk);
    inv_en   = 1'b1;
    inv_line = cotag_line_of(pte_addr[PA_W-1:LINE_BITS]);
    #1;
    m = inv_match;
    @(negedge clk);
    inv_en = 1'b0;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam vpn_t GA = 36'h0_1234_5678;

  initial begin
    pfn_t spp;
    logic f, m;
    logic [1:0] src;
    int refs, cyc;
    tr_valid = 0; tr_gvp = '0; inv_en = 0; inv_line = '0; flush = 0;

    init(pfn_t'(40'h100), pfn_t'(40'h10));
    gmap(GA, pfn_t'(40'h5000), 1'b1);          nmap(pfn_t'(40'h5000), pfn_t'(40'h9_0005), 1'b1);
    gmap(GA + 1, pfn_t'(40'h5001), 1'b1);      nmap(pfn_t'(40'h5001), pfn_t'(40'h9_0006), 1'b1);
    for (int k = 0; k < 5; k++) begin
      gmap(vpn_t'(36'h2000 + 16 * k), pfn_t'(40'h6000 + k), 1'b1);
      nmap(pfn_t'(40'h6000 + k), pfn_t'(40'hA_0000 + k), 1'b1);
    end
    gmap(36'h3000, pfn_t'(40'h7000), 1'b0);    nmap(pfn_t'(40'h7000), pfn_t'(40'hB_0000), 1'b0);
    gcr3_i = gcr3;
    ncr3_i = ncr3;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // cold two-dimensional walk: 24 references
    translate(GA, spp, f, src, refs, cyc);
    check(!f && spp == pfn_t'(40'h9_0005), "cold walk result");
    check(src == 2'd2 && refs == 24, $sformatf("cold walk makes 24 reads (%0d)", refs));

    // repeat: L1 TLB hit, answered one cycle after the request
    translate(GA, spp, f, src, refs, cyc);
    check(spp == pfn_t'(40'h9_0005) && src == 2'd0, "L1 TLB hit");
    check(cyc == 1, $sformatf("L1 TLB hit latency %0d", cyc));

    // neighbour page: MMU cache gives the gL1 table, nested walk for the new data page
    translate(GA + 1, spp, f, src, refs, cyc);
    check(spp == pfn_t'(40'h9_0006) && src == 2'd2, "neighbour result");
    check(refs == 5, $sformatf("neighbour uses MMU cache: %0d reads", refs));

    // five pages in one L1 TLB set; the first then comes from the L2 TLB
    for (int k = 0; k < 5; k++) translate(vpn_t'(36'h2000 + 16 * k), spp, f, src, refs, cyc);
    check(spp == pfn_t'(40'hA_0004), "fifth page");
    translate(vpn_t'(36'h2000), spp, f, src, refs, cyc);
    check(spp == pfn_t'(40'hA_0000) && src == 2'd1, $sformatf("L2 TLB hit (src %0d)", src));
    check(cyc == 2, $sformatf("L2 TLB hit latency %0d", cyc));

    // accessed bits clear: one guest and one nested mark
    translate(36'h3000, spp, f, src, refs, cyc);
    check(spp == pfn_t'(40'hB_0000), "walk with clear accessed bits");
    check(marks_g == 1 && marks_n == 1, $sformatf("marks g=%0d n=%0d", marks_g, marks_n));

    // hypervisor remaps GPP 0x5000: change the nested leaf, invalidate its line
    nmap(pfn_t'(40'h5000), pfn_t'(40'h9_1234), 1'b1);
    invalidate(n_entry_addr(pfn_t'(40'h5000), 1), m);
    check(m, "co-tag match on the remapped entry's line");
    translate(GA, spp, f, src, refs, cyc);
    check(spp == pfn_t'(40'h9_1234) && src == 2'd2, "remapped translation walked again");

    // line nobody cached from
    invalidate(paddr_t'(52'hF_FFF0_0000), m);
    check(!m, "no match for an unrelated line");
    translate(GA, spp, f, src, refs, cyc);
    check(src == 2'd0, "unrelated invalidation kept the TLB entry");

    // invalidation during a walk restarts it
    flush = 1'b1;
    @(negedge clk);
    flush = 1'b0;
    fork
      translate(GA, spp, f, src, refs, cyc);
      begin
        repeat (10) @(negedge clk);
        inv_en = 1'b1; inv_line = cotag_line_of(laddr_t'(52'h7_7777_7777 >> 0));
        @(negedge clk);
        inv_en = 1'b0;
      end
    join
    check(spp == pfn_t'(40'h9_1234) && refs == 24 && cyc > 60,
          $sformatf("walk restarted after an invalidation (refs %0d, %0d cycles)", refs, cyc));

    // unmapped page faults
    translate(36'h0_0000_0001, spp, f, src, refs, cyc);
    check(f, "unmapped page faults");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
