// Multi-CPU system with hardware translation coherence.
//
// NCPU tiles (MMU + L1 cache each) and NBANKS coherence directory banks are
// joined by the interconnect.  Page table entries live in ordinary memory and
// are cached coherently; because every TLB, MMU cache and nTLB entry carries a
// co-tag naming the nested page table entry it came from, and the directories
// know which lines hold page tables, a store by one CPU (the hypervisor
// remapping a page) to a nested page table entry invalidates exactly the
// matching translations on the CPUs listed as sharers, in hardware.
//
// Defaults follow the paper's evaluated system: 32 CPUs, 64-entry L1 TLBs,
// 512-entry L2 TLBs, 32-entry nTLBs, 48-entry MMU caches, 32 KB L1 caches.
// One directory bank per CPU (as in the paper's 4-CPU figure), the
// directory's size and the interconnect are this design's choices.  The
// cores, the LLC data arrays and DRAM are outside: each CPU's translation and
// load/store ports and each bank's memory port are top-level ports.
module hatric_top
  import hatric_pkg::*;
#(
  parameter int unsigned NCPU          = 32,
  parameter int unsigned NBANKS        = 32,
  parameter int unsigned DIR_SETS      = 256,
  parameter int unsigned DIR_WAYS      = 8,
  parameter int unsigned L1TLB_ENTRIES = 64,
  parameter int unsigned L2TLB_ENTRIES = 512,
  parameter int unsigned NTLB_ENTRIES  = 32,
  parameter int unsigned MMUC_ENTRIES  = 48,
  parameter int unsigned L1_BYTES      = 32768
) (
  input  logic              clk,
  input  logic              rst_n,
  // per-CPU context and core ports
  input  pfn_t              gcr3         [NCPU],
  input  pfn_t              ncr3         [NCPU],
  input  logic [NCPU-1:0]   flush,
  input  logic [NCPU-1:0]   tr_valid,
  input  vpn_t              tr_gvp       [NCPU],
  output logic [NCPU-1:0]   tr_ready,
  output logic [NCPU-1:0]   tr_rsp_valid,
  output pfn_t              tr_rsp_spp   [NCPU],
  output logic [NCPU-1:0]   tr_rsp_fault,
  output logic [1:0]        tr_rsp_src   [NCPU],
  output logic [4:0]        tr_rsp_refs  [NCPU],
  input  logic [NCPU-1:0]   c_valid,
  input  logic [NCPU-1:0]   c_we,
  input  paddr_t            c_addr       [NCPU],
  input  logic [63:0]       c_wdata      [NCPU],
  output logic [NCPU-1:0]   c_ready,
  output logic [NCPU-1:0]   c_rsp_valid,
  output logic [63:0]       c_rsp_data   [NCPU],
  // per-bank memory ports
  output logic [NBANKS-1:0] mem_valid,
  output logic [NBANKS-1:0] mem_we,
  output laddr_t            mem_addr     [NBANKS],
  output line_t             mem_wdata    [NBANKS],
  input  logic [NBANKS-1:0] mem_ready,
  input  logic [NBANKS-1:0] mem_rsp_valid,
  input  line_t             mem_rsp_data [NBANKS],
  // event counters summed over banks
  output logic [31:0]       cnt_pt_snoop,
  output logic [31:0]       cnt_spurious,
  output logic [31:0]       cnt_backinv,
  output logic [31:0]       cnt_lazy
);

  localparam int unsigned CPU_W = $clog2(NCPU);

  logic [NCPU-1:0]  c_req_valid, c_req_ready, c_rsp_valid_n, c_rsp_ready, c_snp_valid, c_ack_valid;
  cpu_req_t         c_req [NCPU];
  dir_rsp_t         c_rsp [NCPU];
  snoop_t           c_snp [NCPU];
  snoop_ack_t       c_ack [NCPU];

  logic [NBANKS-1:0] b_req_valid, b_req_ready, b_rsp_valid, b_rsp_ready;
  cpu_req_t          b_req     [NBANKS];
  logic [CPU_W-1:0]  b_req_src [NBANKS];
  dir_rsp_t          b_rsp     [NBANKS];
  logic [CPU_W-1:0]  b_rsp_dst [NBANKS];
  logic [NCPU-1:0]   b_snp_valid [NBANKS];
  snoop_t            b_snp       [NBANKS];
  logic [NCPU-1:0]   b_snp_ready [NBANKS];
  logic [NCPU-1:0]   b_ack_valid [NBANKS];
  logic [31:0]       k_pt [NBANKS], k_sp [NBANKS], k_bi [NBANKS], k_lz [NBANKS];

  for (genvar i = 0; i < NCPU; i++) begin : g_cpu
    cpu_tile #(
      .L1TLB_ENTRIES(L1TLB_ENTRIES), .L2TLB_ENTRIES(L2TLB_ENTRIES),
      .NTLB_ENTRIES(NTLB_ENTRIES), .MMUC_ENTRIES(MMUC_ENTRIES), .L1_BYTES(L1_BYTES)
    ) u_tile (
      .clk, .rst_n, .gcr3(gcr3[i]), .ncr3(ncr3[i]), .flush(flush[i]),
      .tr_valid(tr_valid[i]), .tr_gvp(tr_gvp[i]), .tr_ready(tr_ready[i]),
      .tr_rsp_valid(tr_rsp_valid[i]), .tr_rsp_spp(tr_rsp_spp[i]),
      .tr_rsp_fault(tr_rsp_fault[i]), .tr_rsp_src(tr_rsp_src[i]), .tr_rsp_refs(tr_rsp_refs[i]),
      .c_valid(c_valid[i]), .c_we(c_we[i]), .c_addr(c_addr[i]), .c_wdata(c_wdata[i]),
      .c_ready(c_ready[i]), .c_rsp_valid(c_rsp_valid[i]), .c_rsp_data(c_rsp_data[i]),
      .req_valid(c_req_valid[i]), .req(c_req[i]), .req_ready(c_req_ready[i]),
      .rsp_valid(c_rsp_valid_n[i]), .rsp(c_rsp[i]), .rsp_ready(c_rsp_ready[i]),
      .snp_valid(c_snp_valid[i]), .snp(c_snp[i]), .ack_valid(c_ack_valid[i]), .ack(c_ack[i])
    );
  end

  coh_network #(.NCPU(NCPU), .NBANKS(NBANKS)) u_net (
    .clk, .rst_n,
    .c_req_valid, .c_req, .c_req_ready, .c_rsp_valid(c_rsp_valid_n), .c_rsp, .c_rsp_ready,
    .c_snp_valid, .c_snp, .c_ack_valid,
    .b_req_valid, .b_req, .b_req_src, .b_req_ready, .b_rsp_valid, .b_rsp, .b_rsp_dst,
    .b_rsp_ready, .b_snp_valid, .b_snp, .b_snp_ready, .b_ack_valid
  );

  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    coh_directory #(.NCPU(NCPU), .NBANKS(NBANKS), .SETS(DIR_SETS), .WAYS(DIR_WAYS)) u_dir (
      .clk, .rst_n,
      .req_valid(b_req_valid[b]), .req(b_req[b]), .req_src(b_req_src[b]), .req_ready(b_req_ready[b]),
      .rsp_valid(b_rsp_valid[b]), .rsp(b_rsp[b]), .rsp_dst(b_rsp_dst[b]), .rsp_ready(b_rsp_ready[b]),
      .snp_valid(b_snp_valid[b]), .snp(b_snp[b]), .snp_ready(b_snp_ready[b]),
      .ack_valid(b_ack_valid[b]), .ack(c_ack),
      .mem_valid(mem_valid[b]), .mem_we(mem_we[b]), .mem_addr(mem_addr[b]),
      .mem_wdata(mem_wdata[b]), .mem_ready(mem_ready[b]), .mem_rsp_valid(mem_rsp_valid[b]),
      .mem_rsp_data(mem_rsp_data[b]),
      .cnt_pt_snoop(k_pt[b]), .cnt_spurious(k_sp[b]), .cnt_backinv(k_bi[b]), .cnt_lazy(k_lz[b])
    );
  end

  always_comb begin
    cnt_pt_snoop = '0;
    cnt_spurious = '0;
    cnt_backinv  = '0;
    cnt_lazy     = '0;
    for (int b = 0; b < NBANKS; b++) begin
      cnt_pt_snoop += k_pt[b];
      cnt_spurious += k_sp[b];
      cnt_backinv  += k_bi[b];
      cnt_lazy     += k_lz[b];
    end
  end

endmodule
