// Memory side of one CPU: its translation unit (MMU: TLBs, nTLB, MMU cache,
// page table walker) and its private L1 cache, wired together.
//
// The walker's page-table reads and marks go through the L1, so page-table
// lines are cached and kept coherent like any other data.  Snoops arriving at
// the L1 for page-table lines are relayed to the MMU, whose co-tag match comes
// back in the same cycle and is reported in the snoop acknowledgement.
// The core itself is outside this module: it presents guest virtual pages on
// the translation port and system physical addresses on the load/store port.
module cpu_tile
  import hatric_pkg::*;
#(
  parameter int unsigned L1TLB_ENTRIES = 64,
  parameter int unsigned L2TLB_ENTRIES = 512,
  parameter int unsigned NTLB_ENTRIES  = 32,
  parameter int unsigned MMUC_ENTRIES  = 48,
  parameter int unsigned L1_BYTES      = 32768
) (
  input  logic        clk,
  input  logic        rst_n,
  input  pfn_t        gcr3,
  input  pfn_t        ncr3,
  input  logic        flush,
  // translation port
  input  logic        tr_valid,
  input  vpn_t        tr_gvp,
  output logic        tr_ready,
  output logic        tr_rsp_valid,
  output pfn_t        tr_rsp_spp,
  output logic        tr_rsp_fault,
  output logic [1:0]  tr_rsp_src,
  output logic [4:0]  tr_rsp_refs,
  // load/store port
  input  logic        c_valid,
  input  logic        c_we,
  input  paddr_t      c_addr,
  input  logic [63:0] c_wdata,
  output logic        c_ready,
  output logic        c_rsp_valid,
  output logic [63:0] c_rsp_data,
  // coherence network
  output logic        req_valid,
  output cpu_req_t    req,
  input  logic        req_ready,
  input  logic        rsp_valid,
  input  dir_rsp_t    rsp,
  output logic        rsp_ready,
  input  logic        snp_valid,
  input  snoop_t      snp,
  output logic        ack_valid,
  output snoop_ack_t  ack
);

  logic        mr_valid, mr_mark, mr_ready, mr_rsp_valid;
  paddr_t      mr_addr;
  ptkind_t     mr_ptk;
  logic [63:0] mr_rsp_data;
  logic        xl_inv_en, xl_match;
  cotag_line_t xl_inv_line;

  mmu #(
    .L1TLB_ENTRIES(L1TLB_ENTRIES), .L2TLB_ENTRIES(L2TLB_ENTRIES),
    .NTLB_ENTRIES(NTLB_ENTRIES), .NTLB_WAYS(NTLB_ENTRIES),
    .MMUC_ENTRIES(MMUC_ENTRIES), .MMUC_WAYS(MMUC_ENTRIES)
  ) u_mmu (
    .clk, .rst_n, .gcr3, .ncr3,
    .tr_valid, .tr_gvp, .tr_ready, .tr_rsp_valid, .tr_rsp_spp, .tr_rsp_fault,
    .tr_rsp_src, .tr_rsp_refs,
    .mr_valid, .mr_mark, .mr_addr, .mr_ptk, .mr_ready, .mr_rsp_valid, .mr_rsp_data,
    .inv_en(xl_inv_en), .inv_line(xl_inv_line), .inv_match(xl_match), .flush
  );

  l1_cache #(.SIZE_BYTES(L1_BYTES)) u_l1 (
    .clk, .rst_n,
    .c_valid, .c_we, .c_addr, .c_wdata, .c_ready, .c_rsp_valid, .c_rsp_data,
    .w_valid(mr_valid), .w_mark(mr_mark), .w_addr(mr_addr), .w_ptk(mr_ptk),
    .w_ready(mr_ready), .w_rsp_valid(mr_rsp_valid), .w_rsp_data(mr_rsp_data),
    .req_valid, .req, .req_ready, .rsp_valid, .rsp, .rsp_ready,
    .snp_valid, .snp, .ack_valid, .ack,
    .xl_inv_en, .xl_inv_line, .xl_match
  );

endmodule
