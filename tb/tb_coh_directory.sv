// Self-checking test of the translation-aware coherence directory.
// Four CPUs are modelled by the test: each snoop is acknowledged one cycle
// later with a reply the test sets beforehand.  Memory answers reads two
// cycles after the request.  Checked, against values the test works out:
// grants (E for a sole reader, S when shared, M for a writer) and their data;
// a walker read sets the nPT bit so a later write sends invalidations marked
// pt = 1 to every sharer; an L1 eviction of a page-table line leaves the
// sharer listed (lazy), while for an ordinary line it removes it; spurious
// acknowledgements are counted; a MARK makes a line a page-table line;
// directory evictions back-invalidate with pt set for page-table lines;
// dirty data from an owner and from PUTM reaches memory.
module tb_coh_directory;
  import hatric_pkg::*;

  localparam int unsigned NCPU = 4;
  localparam int unsigned SETS = 4;
  localparam int unsigned WAYS = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic            req_valid, req_ready, rsp_valid, rsp_ready;
  cpu_req_t        req;
  logic [1:0]      req_src, rsp_dst;
  dir_rsp_t        rsp;
  logic [NCPU-1:0] snp_valid, snp_ready, ack_valid;
  snoop_t          snp;
  snoop_ack_t      ack [NCPU];
  logic            mem_valid, mem_we, mem_ready, mem_rsp_valid;
  laddr_t          mem_addr;
  line_t           mem_wdata, mem_rsp_data;
  logic [31:0]     cnt_pt_snoop, cnt_spurious, cnt_backinv, cnt_lazy;

  coh_directory #(.NCPU(NCPU), .NBANKS(1), .SETS(SETS), .WAYS(WAYS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic line_t pattern(input laddr_t a);
    return {8{a[45:0], 18'h2A5A5}};
  endfunction

  // ---- memory ----
  line_t mem [laddr_t];
  int    mwrites = 0;
  logic  mpend;
  laddr_t ma;
  assign mem_ready = !mpend;
  always_ff @(posedge clk) begin
    mem_rsp_valid <= 1'b0;
    if (!rst_n) mpend <= 1'b0;
    else if (mem_valid && mem_ready) begin
      if (mem_we) begin
        mem[mem_addr] = mem_wdata;
        mwrites++;
      end else begin
        mpend <= 1'b1;
        ma    <= mem_addr;
      end
    end else if (mpend) begin
      mpend         <= 1'b0;
      mem_rsp_valid <= 1'b1;
      mem_rsp_data  <= mem.exists(ma) ? mem[ma] : pattern(ma);
    end
  end

  // ---- CPU snoop models ----
  snoop_ack_t reply [NCPU];
  snoop_t     seen  [NCPU][$];
  assign snp_ready = '1;
  always_ff @(posedge clk) begin
    ack_valid <= '0;
    for (int i = 0; i < NCPU; i++)
      if (snp_valid[i]) begin
        ack_valid[i] <= 1'b1;
        ack[i]       <= reply[i];
        seen[i].push_back(snp);
      end
  end

  // one request and its grant (no grant for PUTs)
  task automatic send(input req_type_e t, input int s, input laddr_t a, input ptkind_t k,
                      input line_t d, output dir_rsp_t g);
    @(negedge clk);
    req_valid = 1'b1; req_src = 2'(s); req = '{typ: t, addr: a, ptk: k, data: d};
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 1'b0;
    if (t == REQ_PUTS || t == REQ_PUTM) begin
      repeat (4) @(negedge clk);
    end else begin
      while (!rsp_valid) @(negedge clk);
      check(rsp_dst == 2'(s), "grant goes to the requester");
      g = rsp;
      @(negedge clk);
    end
  endtask

  function automatic snoop_ack_t r(input bit l1, input bit xl, input bit dirty, input line_t d);
    return '{l1_hit: l1, xl_hit: xl, dirty: dirty, data: d};
  endfunction

  task automatic clear_seen();
    for (int i = 0; i < NCPU; i++) seen[i].delete();
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam ptkind_t NPT  = '{gpt: 1'b0, npt: 1'b1};
  localparam ptkind_t GPT  = '{gpt: 1'b1, npt: 1'b0};
  localparam ptkind_t NONE = '{gpt: 1'b0, npt: 1'b0};
  // line addresses; set = address bits 1:0
  localparam laddr_t L_PT  = 46'h100;   // set 0
  localparam laddr_t L_D   = 46'h201;   // set 1
  localparam laddr_t L_MK  = 46'h302;   // set 2
  localparam laddr_t L_E1  = 46'h400;   // set 0
  localparam laddr_t L_E2  = 46'h500;   // set 0

  initial begin
    dir_rsp_t g;
    line_t    dl;
    req_valid = 0; req = '0; req_src = '0; rsp_ready = 1'b1;
    for (int i = 0; i < NCPU; i++) reply[i] = r(1, 0, 0, '0);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // walker of CPU 0 reads a nested page table line: E
    send(REQ_GETS, 0, L_PT, NPT, '0, g);
    check(g.typ == GNT_E && g.data == pattern(L_PT), "sole reader gets E with memory data");
    // CPU 3's walker reads it too: owner 0 is downgraded, CPU 3 gets S
    clear_seen();
    send(REQ_GETS, 3, L_PT, NPT, '0, g);
    check(seen[0].size() == 1 && seen[0][0].typ == SNP_DOWN && !seen[0][0].pt, "owner downgraded");
    check(g.typ == GNT_S && g.data == pattern(L_PT), "second reader gets S");
    // CPU 0's L1 evicts the page-table line: lazy, sharer kept
    send(REQ_PUTS, 0, L_PT, NONE, '0, g);
    check(cnt_lazy == 1, "page-table eviction leaves the sharer list alone");
    // CPU 1 (hypervisor) writes the nested entry
    clear_seen();
    reply[0] = r(0, 0, 0, '0);   // CPU 0 holds nothing any more: spurious
    reply[3] = r(0, 1, 0, '0);   // CPU 3 has a TLB entry with a matching co-tag
    send(REQ_GETM, 1, L_PT, NONE, '0, g);
    check(seen[0].size() == 1 && seen[0][0].typ == SNP_INV && seen[0][0].pt &&
          seen[0][0].addr == L_PT, "lazily kept sharer still invalidated, pt set");
    check(seen[3].size() == 1 && seen[3][0].pt, "translation sharer invalidated, pt set");
    check(seen[1].size() == 0 && seen[2].size() == 0, "requester and non-sharer not snooped");
    check(cnt_pt_snoop == 1 && cnt_spurious == 1, $sformatf("pt snoops %0d spurious %0d",
          cnt_pt_snoop, cnt_spurious));
    check(g.typ == GNT_M, "writer gets M");

    // ordinary line: an eviction removes the sharer, so a write snoops nobody
    for (int i = 0; i < NCPU; i++) reply[i] = r(1, 0, 0, '0);
    send(REQ_GETS, 0, L_D, NONE, '0, g);
    check(g.typ == GNT_E, "ordinary read E");
    send(REQ_PUTS, 0, L_D, NONE, '0, g);
    clear_seen();
    send(REQ_GETM, 1, L_D, NONE, '0, g);
    check(seen[0].size() == 0 && cnt_lazy == 1, "ordinary eviction updates the sharer list eagerly");
    // CPU 2 reads it: owner 1 supplies dirty data, which also reaches memory
    dl = {8{64'hFEED_F00D_0000_0001}};
    reply[1] = r(1, 0, 1, dl);
    clear_seen();
    send(REQ_GETS, 2, L_D, NONE, '0, g);
    check(g.typ == GNT_S && g.data == dl, "data forwarded from the owner");
    check(mem.exists(L_D) && mem[L_D] == dl, "owner's dirty data written to memory");
    check(seen[1].size() == 1 && !seen[1][0].pt, "ordinary downgrade has pt clear");

    // a walker MARK turns a line into a guest page-table line
    reply[1] = r(1, 0, 0, '0);
    send(REQ_MARK, 2, L_MK, GPT, '0, g);
    check(g.typ == GNT_ACK, "mark acknowledged");
    clear_seen();
    reply[2] = r(0, 1, 0, '0);
    send(REQ_GETM, 1, L_MK, NONE, '0, g);
    check(seen[2].size() == 1 && seen[2][0].pt, "marked line's write relayed to translations");

    // owner writes back with PUTM; memory updated; next read gets it
    dl = {8{64'h0123_4567_89AB_CDEF}};
    send(REQ_PUTM, 1, L_MK, NONE, dl, g);
    check(mem.exists(L_MK) && mem[L_MK] == dl, "PUTM data written to memory");
    check(cnt_lazy == 2, "PUTM of a page-table line is lazy too");

    // set 0 holds L_PT (owner 1); two more lines evict it: back-invalidation with pt set
    clear_seen();
    reply[1] = r(1, 0, 1, {8{64'h7777}});
    send(REQ_GETS, 2, L_E1, NONE, '0, g);
    send(REQ_GETS, 2, L_E2, NONE, '0, g);
    check(cnt_backinv >= 1, $sformatf("directory eviction back-invalidates (%0d)", cnt_backinv));
    check(seen[1].size() >= 1 && seen[1][0].addr == L_PT && seen[1][0].pt && seen[1][0].typ == SNP_INV,
          "back-invalidation of a page-table line carries pt");
    check(mem.exists(L_PT) && mem[L_PT] == {8{64'h7777}}, "evicted owner's dirty data written back");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
