// End-to-end test of the whole system at its default size (32 CPUs, 32
// directory banks), following the paper's walk-through of a nested page
// table remap.  All CPUs run one VM with shared guest and nested page tables
// (tb_ptmem_pkg); a memory model behind every bank port assembles lines from
// those tables, three cycles after a read.
//
//  1. CPU 0 misses in its TLBs and walks (24 reads); CPU 3 caches two
//     translations whose nested entries share one line; CPU 1, the
//     hypervisor, reads the nested entry; CPU 2 caches the same translation,
//     then flushes its structures, caches an unrelated translation and evicts
//     the page-table line from its L1 (a lazy eviction).
//  2. CPU 1 stores a new system page into the nested entry.  The directory
//     sends page-table invalidations to the sharers: CPU 0's and both of
//     CPU 3's TLB entries go; CPU 2's acknowledgement is spurious.
//  3. CPU 0 and CPU 3 translate again, walk, and see the new page (read
//     coherently from CPU 1's modified line); CPU 3's other translation is
//     walked again and unchanged; CPU 2's unrelated translation still hits.
//  4. Other mechanisms: MMU cache reuse, an L2 TLB hit, accessed-bit marks,
//     a directory eviction with back-invalidation.
// Each mechanism is counted and one that never happens is a failure.
module tb_hatric_top;
  import hatric_pkg::*;
  import tb_ptmem_pkg::*;

  localparam int unsigned NCPU   = 32;
  localparam int unsigned NBANKS = 32;
  localparam int unsigned DSETS  = 256;
  localparam int unsigned DWAYS  = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  pfn_t              gcr3_a [NCPU], ncr3_a [NCPU];
  logic [NCPU-1:0]   flush, tr_valid, tr_ready, tr_rsp_valid, tr_rsp_fault;
  vpn_t              tr_gvp [NCPU];
  pfn_t              tr_rsp_spp [NCPU];
  logic [1:0]        tr_rsp_src [NCPU];
  logic [4:0]        tr_rsp_refs [NCPU];
  logic [NCPU-1:0]   c_valid, c_we, c_ready, c_rsp_valid;
  paddr_t            c_addr [NCPU];
  logic [63:0]       c_wdata [NCPU], c_rsp_data [NCPU];
  logic [NBANKS-1:0] mem_valid, mem_we, mem_ready, mem_rsp_valid;
  laddr_t            mem_addr [NBANKS];
  line_t             mem_wdata [NBANKS], mem_rsp_data [NBANKS];
  logic [31:0]       cnt_pt_snoop, cnt_spurious, cnt_backinv, cnt_lazy;

  hatric_top dut (
    .clk, .rst_n, .gcr3(gcr3_a), .ncr3(ncr3_a), .flush,
    .tr_valid, .tr_gvp, .tr_ready, .tr_rsp_valid, .tr_rsp_spp, .tr_rsp_fault, .tr_rsp_src,
    .tr_rsp_refs, .c_valid, .c_we, .c_addr, .c_wdata, .c_ready, .c_rsp_valid, .c_rsp_data,
    .mem_valid, .mem_we, .mem_addr, .mem_wdata, .mem_ready, .mem_rsp_valid, .mem_rsp_data,
    .cnt_pt_snoop, .cnt_spurious, .cnt_backinv, .cnt_lazy
  );

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---- memory behind every bank ----
  logic   mpend [NBANKS];
  int     mlat  [NBANKS];
  laddr_t maddr [NBANKS];
  int     nmarks;
  always_ff @(posedge clk) begin
    for (int b = 0; b < NBANKS; b++) begin
      mem_rsp_valid[b] <= 1'b0;
      if (!rst_n) begin
        mpend[b] <= 1'b0;
      end else if (mem_valid[b] && mem_ready[b]) begin
        if (mem_we[b]) begin
          for (int w = 0; w < 8; w++) wr({mem_addr[b], 3'(w), 3'b000}, mem_wdata[b][64*w +: 64]);
        end else begin
          mpend[b] <= 1'b1;
          mlat[b]  <= 2;
          maddr[b] <= mem_addr[b];
        end
      end else if (mpend[b]) begin
        if (mlat[b] == 0) begin
          line_t l;
          for (int w = 0; w < 8; w++) l[64*w +: 64] = rd({maddr[b], 3'(w), 3'b000});
          mpend[b]        <= 1'b0;
          mem_rsp_valid[b] <= 1'b1;
          mem_rsp_data[b]  <= l;
        end else mlat[b] <= mlat[b] - 1;
      end
    end
  end
  always_comb for (int b = 0; b < NBANKS; b++) mem_ready[b] = !mpend[b];

  // count walker marks as they leave the L1s
  int marks_c [NCPU];
  for (genvar i = 0; i < NCPU; i++) begin : g_mk
    initial marks_c[i] = 0;
    always @(posedge clk)
      if (dut.g_cpu[i].u_tile.req_valid && dut.g_cpu[i].u_tile.req_ready &&
          dut.g_cpu[i].u_tile.req.typ == REQ_MARK) marks_c[i]++;
  end
  always_comb begin
    nmarks = 0;
    for (int i = 0; i < NCPU; i++) nmarks += marks_c[i];
  end

  // ---- per-CPU drivers ----
  task automatic translate(input int c, input vpn_t g, output pfn_t spp, output logic [1:0] src,
                           output int refs);
    @(negedge clk);
    while (!tr_ready[c]) @(negedge clk);
    tr_valid[c] = 1'b1;
    tr_gvp[c]   = g;
    @(negedge clk);
    tr_valid[c] = 1'b0;
    while (!tr_rsp_valid[c]) @(negedge clk);
    spp  = tr_rsp_spp[c];
    src  = tr_rsp_src[c];
    refs = int'(tr_rsp_refs[c]);
    check(!tr_rsp_fault[c], $sformatf("CPU %0d page %h no fault", c, g));
  endtask

  task automatic access(input int c, input logic we, input paddr_t a, input logic [63:0] wd,
                        output logic [63:0] rdat);
    @(negedge clk);
    while (!c_ready[c]) @(negedge clk);
    c_valid[c] = 1'b1; c_we[c] = we; c_addr[c] = a; c_wdata[c] = wd;
    @(negedge clk);
    c_valid[c] = 1'b0;
    while (!c_rsp_valid[c]) @(negedge clk);
    rdat = c_rsp_data[c];
  endtask

  initial begin
    #20000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pages of the scenario
  localparam vpn_t GVP_A = 36'h0_0040_0003;   // maps GPP_A
  localparam vpn_t GVP_B = 36'h0_0040_0004;   // maps GPP_B, nested entry in GPP_A's line
  localparam vpn_t GVP_C = 36'h0_7000_0000;   // unrelated
  localparam pfn_t GPP_A = 40'h8_0008;
  localparam pfn_t GPP_B = 40'h8_0009;
  localparam pfn_t GPP_C = 40'hC_0000;
  localparam pfn_t SPP_A = 40'h5;             // off-chip frame
  localparam pfn_t SPP_N = 40'h200;           // die-stacked frame it migrates to
  localparam pfn_t SPP_B = 40'h6;
  localparam pfn_t SPP_C = 40'h7;

  int n_cold = 0, n_mmuc = 0, n_l1hit = 0, n_l2hit = 0, n_precise = 0, n_remap = 0;

  initial begin
    pfn_t        spp;
    logic [1:0]  src;
    int          refs;
    logic [63:0] d;
    paddr_t      ne_a, ne_c;
    int unsigned pt0, sp0, lz0;

    flush = '0; tr_valid = '0; c_valid = '0; c_we = '0;
    for (int i = 0; i < NCPU; i++) begin
      tr_gvp[i] = '0; c_addr[i] = '0; c_wdata[i] = '0;
    end

    init(pfn_t'(40'h1000), pfn_t'(40'h100));
    gmap(GVP_A, GPP_A, 1'b1);  nmap(GPP_A, SPP_A, 1'b1);
    gmap(GVP_B, GPP_B, 1'b1);  nmap(GPP_B, SPP_B, 1'b1);
    gmap(GVP_C, GPP_C, 1'b1);  nmap(GPP_C, SPP_C, 1'b1);
    for (int k = 0; k < 5; k++) begin
      gmap(vpn_t'(36'h0_0900_0000 + 16 * k), pfn_t'(40'hD_0000 + k), 1'b0);   // accessed bit clear
      nmap(pfn_t'(40'hD_0000 + k), pfn_t'(40'h300 + k), 1'b1);
    end
    ne_a = n_entry_addr(GPP_A, 1);
    ne_c = n_entry_addr(GPP_C, 1);
    check(ne_a[PA_W-1:6] == n_entry_addr(GPP_B, 1) >> 6, "A and B nested entries share a line");
    for (int i = 0; i < NCPU; i++) begin
      gcr3_a[i] = gcr3;
      ncr3_a[i] = ncr3;
    end
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // ---- 1. fill translation structures ----
    translate(0, GVP_A, spp, src, refs);
    check(spp == SPP_A && src == 2'd2 && refs == 24, $sformatf("CPU 0 cold walk (%0d reads)", refs));
    if (refs == 24) n_cold++;
    translate(0, GVP_A, spp, src, refs);
    check(spp == SPP_A && src == 2'd0, "CPU 0 TLB hit");
    if (src == 2'd0) n_l1hit++;
    translate(3, GVP_A, spp, src, refs);
    check(spp == SPP_A, "CPU 3 A");
    translate(3, GVP_B, spp, src, refs);
    check(spp == SPP_B && refs > 0 && refs < 24, $sformatf("CPU 3 B reuses its MMU cache (%0d)", refs));
    if (refs > 0 && refs < 24) n_mmuc++;
    access(1, 1'b0, ne_a, '0, d);
    check(d == pte(SPP_A, 1'b1), "hypervisor reads the nested entry");
    translate(2, GVP_A, spp, src, refs);
    check(spp == SPP_A, "CPU 2 A");
    @(negedge clk); flush[2] = 1'b1; @(negedge clk); flush[2] = 1'b0;
    translate(2, GVP_C, spp, src, refs);
    check(spp == SPP_C, "CPU 2 C");
    lz0 = cnt_lazy;
    for (int k = 1; k <= 8; k++) access(2, 1'b0, ne_a + paddr_t'(4096 * k), '0, d);
    check(cnt_lazy > lz0, "CPU 2's eviction of the page-table line is lazy");

    // ---- 2. hypervisor remaps GPP_A to a die-stacked frame ----
    pt0 = cnt_pt_snoop;
    sp0 = cnt_spurious;
    access(1, 1'b1, ne_a, pte(SPP_N, 1'b1), d);
    check(cnt_pt_snoop > pt0, "store to the nested entry sends page-table invalidations");
    check(cnt_spurious > sp0, "CPU 2's acknowledgement is spurious");

    // ---- 3. effects ----
    translate(0, GVP_A, spp, src, refs);
    check(spp == SPP_N && src == 2'd2, $sformatf("CPU 0 sees the new frame %h (src %0d)", spp, src));
    if (spp == SPP_N) n_remap++;
    translate(3, GVP_A, spp, src, refs);
    check(spp == SPP_N && src == 2'd2, "CPU 3 sees the new frame");
    translate(3, GVP_B, spp, src, refs);
    check(spp == SPP_B && src == 2'd2, "CPU 3's aliasing entry was invalidated and rewalked");
    translate(2, GVP_C, spp, src, refs);
    check(spp == SPP_C && src == 2'd0, "CPU 2's unrelated translation survives");
    if (src == 2'd0) n_precise++;
    translate(5, GVP_A, spp, src, refs);
    check(spp == SPP_N && refs == 24, "a new CPU walks to the new frame");

    // ---- 4. L2 TLB and accessed-bit marks ----
    for (int k = 0; k < 5; k++) begin
      translate(4, vpn_t'(36'h0_0900_0000 + 16 * k), spp, src, refs);
      check(spp == pfn_t'(40'h300 + k), $sformatf("page D%0d", k));
    end
    translate(4, vpn_t'(36'h0_0900_0000), spp, src, refs);
    check(spp == pfn_t'(40'h300) && src == 2'd1, $sformatf("L2 TLB hit (src %0d)", src));
    if (src == 2'd1) n_l2hit++;
    check(nmarks >= 5, $sformatf("accessed-bit marks %0d", nmarks));

    // ---- directory eviction: DWAYS+1 CPUs read lines of one directory set ----
    for (int k = 0; k <= DWAYS; k++)
      access(8 + k, 1'b0, paddr_t'(64'h4000_0000 + 64'(64 * NBANKS * DSETS) * k), '0, d);
    check(cnt_backinv > 0, $sformatf("directory eviction back-invalidates (%0d)", cnt_backinv));

    // ---- mechanism summary ----
    $display("mechanisms: cold=%0d mmu_cache=%0d l1tlb_hit=%0d l2tlb_hit=%0d pt_snoop=%0d spurious=%0d lazy=%0d backinv=%0d marks=%0d remap=%0d precise=%0d",
             n_cold, n_mmuc, n_l1hit, n_l2hit, cnt_pt_snoop, cnt_spurious, cnt_lazy, cnt_backinv,
             nmarks, n_remap, n_precise);
    check(n_cold > 0 && n_mmuc > 0 && n_l1hit > 0 && n_l2hit > 0 && cnt_pt_snoop > 0 &&
          cnt_spurious > 0 && cnt_lazy > 0 && cnt_backinv > 0 && nmarks > 0 && n_remap > 0 &&
          n_precise > 0, "every mechanism happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
