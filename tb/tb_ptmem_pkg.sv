// Test-only model of memory holding two-dimensional page tables.
// Memory is a sparse map of 8-byte words keyed by system physical address.
// init() creates the nested root (ncr3, a system page) and the guest root
// (gcr3, a guest page mapped by the nested table).  nmap() maps a guest
// physical page to a system page in the nested table, gmap() maps a guest
// virtual page to a guest physical page in the guest table, creating table
// pages (and their nested mappings) as needed.  Entries use bit 0 present,
// bit 5 accessed and bits 51:12 frame, as in x86-64.
package tb_ptmem_pkg;
  import hatric_pkg::*;

  logic [63:0] mem [paddr_t];
  pfn_t next_spp;
  pfn_t next_gpp;
  pfn_t ncr3;
  pfn_t gcr3;

  function automatic logic [63:0] rd(input paddr_t a);
    paddr_t k;
    k = {a[PA_W-1:3], 3'b000};
    return mem.exists(k) ? mem[k] : 64'h0;
  endfunction

  function automatic void wr(input paddr_t a, input logic [63:0] v);
    mem[{a[PA_W-1:3], 3'b000}] = v;
  endfunction

  function automatic logic [63:0] pte(input pfn_t f, input bit a);
    return (64'(f) << PAGE_BITS) | 64'h1 | (a ? 64'h20 : 64'h0);
  endfunction

  function automatic pfn_t new_spp();
    next_spp++;
    return next_spp;
  endfunction

  // system address of the nested entry for gpp at level lvl (tables must exist above it)
  function automatic paddr_t n_entry_addr(input pfn_t gpp, input int lvl);
    pfn_t t;
    t = ncr3;
    for (int l = 4; l > lvl; l--) t = rd({t, gpp[9*(l-1) +: 9], 3'b000}) >> PAGE_BITS;
    return {t, gpp[9*(lvl-1) +: 9], 3'b000};
  endfunction

  function automatic void nmap(input pfn_t gpp, input pfn_t spp, input bit a);
    pfn_t t;
    t = ncr3;
    for (int l = 4; l > 1; l--) begin
      paddr_t ea;
      logic [63:0] e;
      ea = {t, gpp[9*(l-1) +: 9], 3'b000};
      e  = rd(ea);
      if (!e[0]) begin
        e = pte(new_spp(), 1'b1);
        wr(ea, e);
      end
      t = e >> PAGE_BITS;
    end
    wr({t, gpp[8:0], 3'b000}, pte(spp, a));
  endfunction

  function automatic pfn_t gpp2spp(input pfn_t gpp);
    return rd(n_entry_addr(gpp, 1)) >> PAGE_BITS;
  endfunction

  function automatic pfn_t new_gpp();
    next_gpp++;
    nmap(next_gpp, new_spp(), 1'b1);
    return next_gpp;
  endfunction

  function automatic void gmap(input vpn_t gvp, input pfn_t gpp, input bit a);
    pfn_t t;
    t = gcr3;
    for (int l = 4; l > 1; l--) begin
      paddr_t ea;
      logic [63:0] e;
      ea = {gpp2spp(t), gvp[9*(l-1) +: 9], 3'b000};
      e  = rd(ea);
      if (!e[0]) begin
        e = pte(new_gpp(), 1'b1);
        wr(ea, e);
      end
      t = e >> PAGE_BITS;
    end
    wr({gpp2spp(t), gvp[8:0], 3'b000}, pte(gpp, a));
  endfunction

  // guest physical page a guest virtual page maps to
  function automatic pfn_t gvp2gpp(input vpn_t gvp);
    pfn_t t;
    t = gcr3;
    for (int l = 4; l >= 1; l--) t = rd({gpp2spp(t), gvp[9*(l-1) +: 9], 3'b000}) >> PAGE_BITS;
    return t;
  endfunction

  function automatic void init(input pfn_t spp_base, input pfn_t gpp_base);
    mem.delete();
    next_spp = spp_base;
    next_gpp = gpp_base;
    ncr3     = new_spp();
    gcr3     = new_gpp();
  endfunction

endpackage
