// Per-CPU translation unit: L1 TLB, L2 TLB, nested TLB, paging-structure MMU
// cache, and the hardware page table walker that fills them and sets their
// co-tags.
//
// A translation request carries a 36-bit guest virtual page (GVP).  The L1 TLB
// is looked up in the request cycle, the L2 TLB in the next.  On a miss in
// both, the walker performs the two-dimensional walk of a virtualized x86-64
// system: the guest root (guest CR3, a guest physical page) and every guest
// table pointer it meets are translated to system physical pages by a nested
// walk (nL4..nL1, rooted at nested CR3), and the guest levels gL4..gL1 are
// read from those system pages.  With every structure cold that is 5 nested
// walks of 4 reads plus 4 guest reads, 24 memory references, as in the paper.
// The nTLB short-circuits a nested walk (GPP -> SPP).  The MMU cache is a
// paging-structure cache looked up with GVP prefixes: the entry for guest
// level L (L = 4, 3, 2) is keyed by the level and GVP bits 35:9(L-1) and holds
// the system page of the level L-1 guest table.  The walker probes levels 2,
// 3, 4 in turn, one cycle each, and starts the walk below the deepest hit.
//
// Co-tags (paper): every entry filled gets bits 19:3 of the system physical
// address of the nested leaf entry (nL1) that produced its system page; for
// the TLBs that is the nL1 entry of the final GPP -> SPP step.  An
// invalidation (inv_en, inv_line) from the L1's snoop path is applied to all
// four structures in the same cycle and inv_match reports whether any entry
// matched.  When a page table entry read by the walker has its accessed bit
// clear, the walker sends a mark request through the memory port so that the
// directory records the line as guest (gPT) or nested (nPT) page table; the
// walker does not itself write the accessed bit.
//
// This design's own choices: structure associativities (parameters below),
// the sequential probe of the MMU cache, no superpages and a single address
// space (no VM or process identifiers in the tags).  If a page table
// invalidation arrives while a walk is under way the walk's remaining fills
// are suppressed and the walk is restarted, so data read before the change is
// never installed.  A non-present entry ends the walk with a fault response.
//
// Memory port: one outstanding 64-bit read (mr_mark = 0) or mark (mr_mark = 1)
// at a time; a request is held until mr_ready, a read completes with
// mr_rsp_valid and the entry in mr_rsp_data, a mark completes with
// mr_rsp_valid.  Translation port: tr_valid/tr_ready, then one tr_rsp_valid
// pulse; an L1 TLB hit answers in the next cycle, an L2 TLB hit one cycle
// later.  tr_rsp_src tells where the translation came from and tr_rsp_refs
// how many memory reads the walk made.
module mmu
  import hatric_pkg::*;
#(
  parameter int unsigned L1TLB_ENTRIES = 64,
  parameter int unsigned L1TLB_WAYS    = 4,
  parameter int unsigned L2TLB_ENTRIES = 512,
  parameter int unsigned L2TLB_WAYS    = 4,
  parameter int unsigned NTLB_ENTRIES  = 32,
  parameter int unsigned NTLB_WAYS     = 32,
  parameter int unsigned MMUC_ENTRIES  = 48,
  parameter int unsigned MMUC_WAYS     = 48
) (
  input  logic        clk,
  input  logic        rst_n,
  // context registers
  input  pfn_t        gcr3,        // guest physical page of the guest root table
  input  pfn_t        ncr3,        // system physical page of the nested root table
  // translation requests from the core
  input  logic        tr_valid,
  input  vpn_t        tr_gvp,
  output logic        tr_ready,
  output logic        tr_rsp_valid,
  output pfn_t        tr_rsp_spp,
  output logic        tr_rsp_fault,
  output logic [1:0]  tr_rsp_src,  // 0 L1 TLB, 1 L2 TLB, 2 page walk
  output logic [4:0]  tr_rsp_refs,
  // walker memory port (through the L1 cache)
  output logic        mr_valid,
  output logic        mr_mark,
  output paddr_t      mr_addr,
  output ptkind_t     mr_ptk,
  input  logic        mr_ready,
  input  logic        mr_rsp_valid,
  input  logic [63:0] mr_rsp_data,
  // translation coherence
  input  logic        inv_en,
  input  cotag_line_t inv_line,
  output logic        inv_match,
  input  logic        flush
);

  localparam int unsigned PSC_KEY_W = 2 + VPN_W;

  typedef enum logic [4:0] {
    S_IDLE, S_L2, S_PSC, S_NEST, S_NRD, S_NWAIT, S_NMARK, S_NMARKW, S_NSTEP,
    S_NDONE, S_GRD, S_GWAIT, S_GMARK, S_GMARKW, S_GSTEP, S_RESP
  } state_e;

  state_e      st;
  vpn_t        gvp_q;
  logic [2:0]  glvl;       // guest level of the table being located (0: data page)
  logic [2:0]  plvl;       // MMU cache level being probed
  pfn_t        ngpp;       // guest physical page under nested translation
  logic [2:0]  nlvl;
  pfn_t        nspp;
  cotag_t      ncotag;
  paddr_t      pte_addr;
  logic [63:0] pte_q;
  logic        stale;
  logic [4:0]  refs;

  // ---------------- structures ----------------
  logic   l1_hit, l2_hit, nt_hit, pc_hit;
  pfn_t   l1_val, l2_val, nt_val, pc_val;
  cotag_t l1_ct, l2_ct, nt_ct, pc_ct;
  logic   l1_m, l2_m, nt_m, pc_m;
  logic   l1_fill, l2_fill, nt_fill, pc_fill;
  pfn_t   l1_fval, tlb_fval;
  cotag_t l1_fct, tlb_fct;
  logic [PSC_KEY_W-1:0] pc_key, pc_fkey;
  vpn_t   l1_key;

  function automatic logic [PSC_KEY_W-1:0] psc_key(input vpn_t v, input logic [2:0] lvl);
    vpn_t m;
    m = v;
    for (int i = 0; i < VPN_W; i++)
      if (i < 9 * (int'(lvl) - 1)) m[i] = 1'b0;
    return {lvl[1:0], m};
  endfunction

  assign l1_key = (st == S_IDLE) ? tr_gvp : gvp_q;

  xlat_cache #(.ENTRIES(L1TLB_ENTRIES), .WAYS(L1TLB_WAYS), .KEY_W(VPN_W), .VAL_W(PFN_W)) u_l1tlb (
    .clk, .rst_n, .lk_key(l1_key), .lk_hit(l1_hit), .lk_val(l1_val), .lk_cotag(l1_ct),
    .fill_en(l1_fill), .fill_key(gvp_q), .fill_val(l1_fval), .fill_cotag(l1_fct),
    .inv_en, .inv_line, .inv_match(l1_m), .flush);

  xlat_cache #(.ENTRIES(L2TLB_ENTRIES), .WAYS(L2TLB_WAYS), .KEY_W(VPN_W), .VAL_W(PFN_W)) u_l2tlb (
    .clk, .rst_n, .lk_key(gvp_q), .lk_hit(l2_hit), .lk_val(l2_val), .lk_cotag(l2_ct),
    .fill_en(l2_fill), .fill_key(gvp_q), .fill_val(tlb_fval), .fill_cotag(tlb_fct),
    .inv_en, .inv_line, .inv_match(l2_m), .flush);

  xlat_cache #(.ENTRIES(NTLB_ENTRIES), .WAYS(NTLB_WAYS), .KEY_W(PFN_W), .VAL_W(PFN_W)) u_ntlb (
    .clk, .rst_n, .lk_key(ngpp), .lk_hit(nt_hit), .lk_val(nt_val), .lk_cotag(nt_ct),
    .fill_en(nt_fill), .fill_key(ngpp), .fill_val(nspp), .fill_cotag(ncotag),
    .inv_en, .inv_line, .inv_match(nt_m), .flush);

  xlat_cache #(.ENTRIES(MMUC_ENTRIES), .WAYS(MMUC_WAYS), .KEY_W(PSC_KEY_W), .VAL_W(PFN_W)) u_mmuc (
    .clk, .rst_n, .lk_key(pc_key), .lk_hit(pc_hit), .lk_val(pc_val), .lk_cotag(pc_ct),
    .fill_en(pc_fill), .fill_key(pc_fkey), .fill_val(nspp), .fill_cotag(ncotag),
    .inv_en, .inv_line, .inv_match(pc_m), .flush);

  assign inv_match = l1_m | l2_m | nt_m | pc_m;

  assign pc_key  = psc_key(gvp_q, plvl);
  assign pc_fkey = psc_key(gvp_q, glvl + 3'd1);

  logic nfill_q;   // the nested walk just produced nspp/ncotag for ngpp

  // fills; once the walk has seen an invalidation none are made
  always_comb begin
    logic ok;
    ok       = !stale && !inv_en;
    l1_fill  = 1'b0;
    l2_fill  = 1'b0;
    pc_fill  = 1'b0;
    nt_fill  = (st == S_NDONE) && nfill_q && ok;
    l1_fval  = nspp;
    l1_fct   = ncotag;
    tlb_fval = nspp;
    tlb_fct  = ncotag;
    if (st == S_L2 && l2_hit) begin
      l1_fill = 1'b1;
      l1_fval = l2_val;
      l1_fct  = l2_ct;
    end
    if (st == S_NDONE && ok) begin
      if (glvl == 3'd0) begin
        l1_fill = 1'b1;
        l2_fill = 1'b1;
      end else if (glvl <= 3'd3) begin
        pc_fill = 1'b1;
      end
    end
  end

  // ---------------- memory port ----------------
  always_comb begin
    mr_valid = (st == S_NRD) || (st == S_GRD) || (st == S_NMARK) || (st == S_GMARK);
    mr_mark  = (st == S_NMARK) || (st == S_GMARK);
    mr_addr  = pte_addr;
    mr_ptk   = '{gpt: (st == S_GRD) || (st == S_GMARK), npt: (st == S_NRD) || (st == S_NMARK)};
  end

  assign tr_ready = (st == S_IDLE);

  // ---------------- walker FSM ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st           <= S_IDLE;
      tr_rsp_valid <= 1'b0;
      tr_rsp_spp   <= '0;
      tr_rsp_fault <= 1'b0;
      tr_rsp_src   <= '0;
      tr_rsp_refs  <= '0;
      gvp_q        <= '0;
      glvl         <= '0;
      plvl         <= '0;
      ngpp         <= '0;
      nlvl         <= '0;
      nspp         <= '0;
      ncotag       <= '0;
      pte_addr     <= '0;
      pte_q        <= '0;
      stale        <= 1'b0;
      refs         <= '0;
      nfill_q      <= 1'b0;
    end else begin
      tr_rsp_valid <= 1'b0;
      if (st != S_IDLE && inv_en) stale <= 1'b1;
      if (st == S_NDONE) nfill_q <= 1'b0;
      unique case (st)
        S_IDLE: if (tr_valid) begin
          gvp_q <= tr_gvp;
          stale <= 1'b0;
          refs  <= '0;
          if (l1_hit) begin
            tr_rsp_valid <= 1'b1;
            tr_rsp_spp   <= l1_val;
            tr_rsp_fault <= 1'b0;
            tr_rsp_src   <= 2'd0;
            tr_rsp_refs  <= '0;
          end else begin
            st <= S_L2;
          end
        end
        S_L2: begin
          if (l2_hit) begin
            tr_rsp_valid <= 1'b1;
            tr_rsp_spp   <= l2_val;
            tr_rsp_fault <= 1'b0;
            tr_rsp_src   <= 2'd1;
            tr_rsp_refs  <= '0;
            st           <= S_IDLE;
          end else begin
            plvl <= 3'd2;
            st   <= S_PSC;
          end
        end
        S_PSC: begin
          if (pc_hit) begin
            glvl     <= plvl - 3'd1;
            pte_addr <= {pc_val, vpn_idx(gvp_q, int'(plvl) - 1), 3'b000};
            st       <= S_GRD;
          end else if (plvl == 3'd4) begin
            glvl <= 3'd4;
            ngpp <= gcr3;
            st   <= S_NEST;
          end else begin
            plvl <= plvl + 3'd1;
          end
        end
        S_NEST: begin
          if (nt_hit && !stale) begin
            nfill_q <= 1'b0;
            nspp   <= nt_val;
            ncotag <= nt_ct;
            st     <= S_NDONE;
          end else begin
            nlvl     <= 3'd4;
            pte_addr <= {ncr3, ngpp[9*3 +: 9], 3'b000};
            st       <= S_NRD;
          end
        end
        S_NRD: if (mr_ready) st <= S_NWAIT;
        S_NWAIT: if (mr_rsp_valid) begin
          refs  <= refs + 5'd1;
          pte_q <= mr_rsp_data;
          if (!mr_rsp_data[PTE_P])      st <= S_RESP;
          else if (!mr_rsp_data[PTE_A]) st <= S_NMARK;
          else                          st <= S_NSTEP;
        end
        S_NMARK:  if (mr_ready) st <= S_NMARKW;
        S_NMARKW: if (mr_rsp_valid) st <= S_NSTEP;
        S_NSTEP: begin
          if (nlvl == 3'd1) begin
            nspp    <= pte_q[PA_W-1:PAGE_BITS];
            ncotag  <= cotag_of(pte_addr);
            nfill_q <= 1'b1;
            st      <= S_NDONE;
          end else begin
            nlvl     <= nlvl - 3'd1;
            pte_addr <= {pte_q[PA_W-1:PAGE_BITS], ngpp[9*(int'(nlvl)-2) +: 9], 3'b000};
            st       <= S_NRD;
          end
        end
        S_NDONE: begin
          if (glvl == 3'd0) begin
            if (stale) begin
              // a page table changed during the walk: start over
              stale <= 1'b0;
              refs  <= '0;
              st    <= S_L2;
            end else begin
              tr_rsp_valid <= 1'b1;
              tr_rsp_spp   <= nspp;
              tr_rsp_fault <= 1'b0;
              tr_rsp_src   <= 2'd2;
              tr_rsp_refs  <= refs;
              st           <= S_IDLE;
            end
          end else begin
            pte_addr <= {nspp, vpn_idx(gvp_q, int'(glvl)), 3'b000};
            st       <= S_GRD;
          end
        end
        S_GRD: if (mr_ready) st <= S_GWAIT;
        S_GWAIT: if (mr_rsp_valid) begin
          refs  <= refs + 5'd1;
          pte_q <= mr_rsp_data;
          if (!mr_rsp_data[PTE_P])      st <= S_RESP;
          else if (!mr_rsp_data[PTE_A]) st <= S_GMARK;
          else                          st <= S_GSTEP;
        end
        S_GMARK:  if (mr_ready) st <= S_GMARKW;
        S_GMARKW: if (mr_rsp_valid) st <= S_GSTEP;
        S_GSTEP: begin
          ngpp <= pte_q[PA_W-1:PAGE_BITS];
          glvl <= glvl - 3'd1;
          st   <= S_NEST;
        end
        S_RESP: begin   // page fault
          tr_rsp_valid <= 1'b1;
          tr_rsp_spp   <= '0;
          tr_rsp_fault <= 1'b1;
          tr_rsp_src   <= 2'd2;
          tr_rsp_refs  <= refs;
          st           <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
