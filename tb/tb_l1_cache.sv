// Self-checking test of the L1 cache and its translation-coherence relay.
// A directory model grants GETS with E, GETM with M and acknowledges MARK, a
// few cycles after each request; line data is a function of the address.
// Checked: a walker read miss sends GETS carrying the page-table kind; hits
// make no request; a write to an E line makes no request; a page-table
// invalidation is relayed to the translation structures with the line's
// co-tag bits, returns dirty data and drops the line; an acknowledgement
// reports L1 and translation matches separately (both clear is spurious); an
// ordinary invalidation is not relayed; a downgrade returns data and a later
// write upgrades with GETM; the ninth line of a set evicts one line with PUT;
// a walker mark becomes a MARK request.
module tb_l1_cache;
  import hatric_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        c_valid, c_we, c_ready, c_rsp_valid;
  paddr_t      c_addr;
  logic [63:0] c_wdata, c_rsp_data;
  logic        w_valid, w_mark, w_ready, w_rsp_valid;
  paddr_t      w_addr;
  ptkind_t     w_ptk;
  logic [63:0] w_rsp_data;
  logic        req_valid, req_ready, rsp_valid, rsp_ready, snp_valid, ack_valid;
  cpu_req_t    req;
  dir_rsp_t    rsp;
  snoop_t      snp;
  snoop_ack_t  ack;
  logic        xl_inv_en, xl_match;
  cotag_line_t xl_inv_line;

  l1_cache dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [63:0] word_of(input paddr_t a);
    return {12'hABC, a[PA_W-1:3], 3'b000} ^ 64'h5A5A;
  endfunction
  function automatic line_t line_of(input laddr_t la);
    line_t l;
    for (int i = 0; i < 8; i++) l[64*i +: 64] = word_of({la, 3'(i), 3'b000});
    return l;
  endfunction

  // ---- directory model ----
  cpu_req_t log_q [$];
  int       wait_c;
  logic     pend;
  cpu_req_t pr;
  assign req_ready = !pend;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pend      <= 1'b0;
      rsp_valid <= 1'b0;
    end else begin
      if (req_valid && req_ready) begin
        log_q.push_back(req);
        if (req.typ != REQ_PUTS && req.typ != REQ_PUTM) begin
          pend   <= 1'b1;
          pr     <= req;
          wait_c <= 3;
        end
      end
      if (pend && !rsp_valid) begin
        if (wait_c == 0) begin
          rsp_valid <= 1'b1;
          rsp.typ   <= (pr.typ == REQ_GETS) ? GNT_E : (pr.typ == REQ_GETM) ? GNT_M : GNT_ACK;
          rsp.data  <= line_of(pr.addr);
        end else wait_c <= wait_c - 1;
      end
      if (rsp_valid && rsp_ready) begin
        rsp_valid <= 1'b0;
        pend      <= 1'b0;
      end
    end
  end

  task automatic core(input logic we, input paddr_t a, input logic [63:0] wd, output logic [63:0] rdat);
    @(negedge clk);
    while (!c_ready) @(negedge clk);
    c_valid = 1'b1; c_we = we; c_addr = a; c_wdata = wd;
    @(negedge clk);
    c_valid = 1'b0;
    while (!c_rsp_valid) @(negedge clk);
    rdat = c_rsp_data;
  endtask

  task automatic walk(input logic mark, input paddr_t a, input ptkind_t k, output logic [63:0] rdat);
    @(negedge clk);
    while (!w_ready) @(negedge clk);
    w_valid = 1'b1; w_mark = mark; w_addr = a; w_ptk = k;
    @(negedge clk);
    w_valid = 1'b0;
    while (!w_rsp_valid) @(negedge clk);
    rdat = w_rsp_data;
  endtask

  // send a snoop, return the acknowledgement and whether it was relayed
  task automatic snoop(input snp_type_e t, input laddr_t la, input logic pt, input logic xm,
                       output snoop_ack_t a, output logic relayed, output cotag_line_t rl);
    @(negedge clk);
    snp_valid = 1'b1; snp = '{typ: t, addr: la, pt: pt}; xl_match = xm;
    #1;
    relayed = xl_inv_en;
    rl      = xl_inv_line;
    @(negedge clk);
    snp_valid = 1'b0; xl_match = 1'b0;
    check(ack_valid, "acknowledgement one cycle after the snoop");
    a = ack;
  endtask

  initial begin
    #500000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam paddr_t PT = 52'h0_0012_3448;   // a nested page table entry
  localparam paddr_t DA = 52'h0_0077_0010;   // ordinary data

  initial begin
    logic [63:0] d;
    snoop_ack_t  a;
    logic        rel;
    cotag_line_t rl;
    int          n;
    c_valid = 0; c_we = 0; c_addr = '0; c_wdata = '0;
    w_valid = 0; w_mark = 0; w_addr = '0; w_ptk = '0;
    snp_valid = 0; snp = '0; xl_match = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // walker read miss
    walk(1'b0, PT, '{gpt: 1'b0, npt: 1'b1}, d);
    check(d == word_of(PT), "walker read data");
    check(log_q.size() == 1 && log_q[0].typ == REQ_GETS && log_q[0].ptk.npt && !log_q[0].ptk.gpt &&
          log_q[0].addr == PT[PA_W-1:LINE_BITS], "GETS carries nPT kind");
    // hit
    walk(1'b0, PT + 8, '{gpt: 1'b0, npt: 1'b1}, d);
    check(d == word_of(PT + 8) && log_q.size() == 1, "walker read hit, no request");
    // core writes the page table entry (line is E): silent upgrade
    core(1'b1, PT, 64'hDEAD_BEEF, d);
    check(log_q.size() == 1, "write to E line makes no request");
    core(1'b0, PT, '0, d);
    check(d == 64'hDEAD_BEEF, "read back the write");

    // page-table invalidation with a translation match
    snoop(SNP_INV, PT[PA_W-1:LINE_BITS], 1'b1, 1'b1, a, rel, rl);
    check(rel && rl == PT[19:6], "relayed to translation structures with co-tag line bits");
    check(a.l1_hit && a.xl_hit && a.dirty, "ack: L1 and translation hit, dirty");
    check(a.data[64*PT[5:3] +: 64] == 64'hDEAD_BEEF, "dirty data returned");
    // now spurious: neither L1 nor translations hold it
    snoop(SNP_INV, PT[PA_W-1:LINE_BITS], 1'b1, 1'b0, a, rel, rl);
    check(!a.l1_hit && !a.xl_hit && !a.dirty, "spurious ack");
    // ordinary line: not relayed
    core(1'b0, DA, '0, d);
    check(d == word_of(DA), "core read miss data");
    snoop(SNP_DOWN, DA[PA_W-1:LINE_BITS], 1'b0, 1'b0, a, rel, rl);
    check(!rel && a.l1_hit && !a.dirty, "downgrade of a clean line, not relayed");
    n = log_q.size();
    core(1'b1, DA, 64'h1111, d);
    check(log_q.size() == n + 1 && log_q[n].typ == REQ_GETM, "write to S line sends GETM");
    snoop(SNP_DOWN, DA[PA_W-1:LINE_BITS], 1'b0, 1'b0, a, rel, rl);
    check(a.dirty && a.data[64*DA[5:3] +: 64] == 64'h1111, "downgrade of M returns data");
    snoop(SNP_INV, DA[PA_W-1:LINE_BITS], 1'b0, 1'b1, a, rel, rl);
    check(!rel && a.l1_hit && !a.xl_hit, "ordinary invalidation not relayed");

    // nine lines of one set (64 sets of 8 ways): one eviction
    for (int k = 0; k < 9; k++) core(1'b1, paddr_t'(52'h10_0000 + 4096 * k), 64'(k), d);
    n = 0;
    foreach (log_q[i]) if (log_q[i].typ == REQ_PUTM) n++;
    check(n == 1, $sformatf("one dirty eviction (%0d)", n));
    for (int k = 1; k < 9; k++) begin
      core(1'b0, paddr_t'(52'h10_0000 + 4096 * k), '0, d);
      check(d == 64'(k), $sformatf("line %0d kept its data", k));
    end

    // walker mark
    n = log_q.size();
    walk(1'b1, PT, '{gpt: 1'b1, npt: 1'b0}, d);
    check(log_q.size() == n + 1 && log_q[n].typ == REQ_MARK && log_q[n].ptk.gpt, "mark request");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
