// Coherence directory of one LLC bank, extended for translation coherence.
//
// Each entry tracks one 64-byte line: a sharer bit per CPU, an owner (a CPU
// holding the line in E or M), and two bits telling whether the line holds
// guest page table (gPT) or nested page table (nPT) entries.  The sharer list
// is pseudo-specific: it does not say whether a CPU holds the line in its L1
// or only translations from it in its TLBs, MMU cache or nTLB, so every
// message goes to the L1 and, for page-table lines, to all translation
// structures of that CPU.  The paper's rules, as built here:
//   * A walker read (GETS carrying a page-table kind) or a walker MARK sets
//     the entry's gPT/nPT bit; a MARK for a line with no entry allocates one.
//   * GETM on a line with other sharers sends SNP_INV to all of them; when the
//     line is a page-table line the snoop carries pt = 1 so the CPUs compare
//     it with their co-tags.  This is how a hypervisor store to a nested page
//     table entry invalidates stale TLB, MMU cache and nTLB entries without
//     interrupts or VM exits.
//   * An L1 eviction (PUTS/PUTM) of a page-table line leaves the sharer list
//     untouched (lazy update), because translations from the line may still
//     be cached; for ordinary lines the sharer is removed.  A CPU whose snoop
//     acknowledgement reports no L1 and no translation match is demoted from
//     the sharer list.
//   * Evicting a directory entry back-invalidates every sharer, with pt set
//     for page-table lines so translation structures are back-invalidated too.
//
// This design's own choices: one transaction at a time per bank (requests
// wait in the interconnect), a set-associative array with round-robin victim
// choice and the full line address as tag, E granted only when no other CPU
// is listed, data always supplied from memory or from the owner's snoop
// acknowledgement (the LLC data array is not modelled; the bank's memory port
// stands for it), and PUTs from a CPU that is no longer owner ignored.  The
// paper uses a dual-grain directory from prior work; this one tracks single
// lines only.
//
// Interface: req/req_src/req_ready (valid-ready, one request accepted per
// transaction), rsp/rsp_dst held until rsp_ready, per-CPU snoop requests
// snp_valid[i] held until snp_ready[i], acknowledgements ack_valid[i] always
// accepted, and a memory port (valid-ready; reads answered by mem_rsp_valid,
// in order).  The counters count page-table snoops sent to translation
// structures, spurious acknowledgements, back-invalidations and lazy
// (ignored) page-table evictions.
module coh_directory
  import hatric_pkg::*;
#(
  parameter int unsigned NCPU   = 32,
  parameter int unsigned NBANKS = 32,
  parameter int unsigned SETS   = 256,
  parameter int unsigned WAYS   = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // requests
  input  logic                    req_valid,
  input  cpu_req_t                req,
  input  logic [$clog2(NCPU)-1:0] req_src,
  output logic                    req_ready,
  // grants
  output logic                    rsp_valid,
  output dir_rsp_t                rsp,
  output logic [$clog2(NCPU)-1:0] rsp_dst,
  input  logic                    rsp_ready,
  // snoops
  output logic [NCPU-1:0]         snp_valid,
  output snoop_t                  snp,
  input  logic [NCPU-1:0]         snp_ready,
  input  logic [NCPU-1:0]         ack_valid,
  input  snoop_ack_t              ack [NCPU],
  // memory (stands for the LLC bank and DRAM behind it)
  output logic                    mem_valid,
  output logic                    mem_we,
  output laddr_t                  mem_addr,
  output line_t                   mem_wdata,
  input  logic                    mem_ready,
  input  logic                    mem_rsp_valid,
  input  line_t                   mem_rsp_data,
  // event counters
  output logic [31:0]             cnt_pt_snoop,
  output logic [31:0]             cnt_spurious,
  output logic [31:0]             cnt_backinv,
  output logic [31:0]             cnt_lazy
);

  localparam int unsigned CPU_W = $clog2(NCPU);
  localparam int unsigned BB    = (NBANKS > 1) ? $clog2(NBANKS) : 0;
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef struct packed {
    logic             valid;
    laddr_t           addr;
    logic             owned;
    logic [CPU_W-1:0] owner;
    logic [NCPU-1:0]  sharers;
    ptkind_t          ptk;
  } dentry_t;

  dentry_t          ent [SETS][WAYS];
  logic [WAY_W-1:0] rr  [SETS];

  typedef enum logic [3:0] {
    D_IDLE, D_LOOK, D_ALLOC, D_ACT, D_SNOOP, D_AFTER, D_MWR, D_MRD, D_MWAIT, D_RSP
  } dstate_e;
  typedef enum logic [1:0] {R_ALLOC, R_RSP, R_IDLE} ret_e;

  dstate_e          st;
  ret_e             ret;
  cpu_req_t         rq;
  logic [CPU_W-1:0] src;
  logic [SET_W-1:0] set_q;
  logic [WAY_W-1:0] way_q;
  logic             victim_snoop;   // the snoop round is a back-invalidation
  logic [NCPU-1:0]  to_send, to_ack;
  logic             got_dirty;
  line_t            dline;
  laddr_t           wb_addr;
  line_t            wb_data;
  gnt_type_e        gtyp;

  logic [SET_W-1:0] rset;
  assign rset = (SETS > 1) ? rq.addr[BB +: SET_W] : '0;

  // lookup of the latched request
  logic             hit;
  logic [WAY_W-1:0] hway, vway;
  always_comb begin
    logic found;
    hit  = 1'b0;
    hway = '0;
    for (int w = 0; w < WAYS; w++)
      if (ent[rset][w].valid && ent[rset][w].addr == rq.addr) begin
        hit  = 1'b1;
        hway = WAY_W'(w);
      end
    found = 1'b0;
    vway  = rr[rset];
    for (int w = 0; w < WAYS; w++)
      if (!found && !ent[rset][w].valid) begin
        found = 1'b1;
        vway  = WAY_W'(w);
      end
  end

  dentry_t e;
  assign e = ent[set_q][way_q];

  function automatic logic [NCPU-1:0] onehot(input logic [CPU_W-1:0] i);
    logic [NCPU-1:0] v;
    v    = '0;
    v[i] = 1'b1;
    return v;
  endfunction

  function automatic logic [NCPU-1:0] holders(input dentry_t d);
    return d.sharers | (d.owned ? onehot(d.owner) : '0);
  endfunction

  assign req_ready = (st == D_IDLE);
  assign snp_valid = (st == D_SNOOP) ? to_send : '0;
  assign rsp_valid = (st == D_RSP);
  assign rsp_dst   = src;
  assign rsp.typ   = gtyp;
  assign rsp.data  = dline;

  always_comb begin
    mem_valid = (st == D_MWR) || (st == D_MRD);
    mem_we    = (st == D_MWR);
    mem_addr  = (st == D_MWR) ? wb_addr : rq.addr;
    mem_wdata = wb_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st           <= D_IDLE;
      ret          <= R_IDLE;
      rq           <= '0;
      src          <= '0;
      set_q        <= '0;
      way_q        <= '0;
      victim_snoop <= 1'b0;
      to_send      <= '0;
      to_ack       <= '0;
      got_dirty    <= 1'b0;
      dline        <= '0;
      wb_addr      <= '0;
      wb_data      <= '0;
      gtyp         <= GNT_S;
      snp          <= '0;
      cnt_pt_snoop <= '0;
      cnt_spurious <= '0;
      cnt_backinv  <= '0;
      cnt_lazy     <= '0;
      for (int s = 0; s < SETS; s++) begin
        rr[s] <= '0;
        for (int w = 0; w < WAYS; w++) ent[s][w].valid <= 1'b0;
      end
    end else begin
      unique case (st)
        D_IDLE: if (req_valid) begin
          rq  <= req;
          src <= req_src;
          st  <= D_LOOK;
        end

        D_LOOK: begin
          set_q <= rset;
          if (hit) begin
            way_q <= hway;
            st    <= D_ACT;
          end else if (rq.typ == REQ_PUTS || rq.typ == REQ_PUTM) begin
            st <= D_IDLE;                 // stale eviction notice
          end else begin
            way_q <= vway;
            if (vway == rr[rset]) rr[rset] <= WAY_W'((32'(rr[rset]) + 1) % WAYS);
            if (ent[rset][vway].valid && holders(ent[rset][vway]) != '0) begin
              // back-invalidate the victim's sharers, translation structures included
              victim_snoop <= 1'b1;
              to_send      <= holders(ent[rset][vway]);
              to_ack       <= holders(ent[rset][vway]);
              got_dirty    <= 1'b0;
              snp          <= '{typ: SNP_INV, addr: ent[rset][vway].addr,
                                pt: ent[rset][vway].ptk.gpt | ent[rset][vway].ptk.npt};
              cnt_backinv  <= cnt_backinv + 1;
              if (ent[rset][vway].ptk.gpt | ent[rset][vway].ptk.npt)
                cnt_pt_snoop <= cnt_pt_snoop + 1;
              st           <= D_SNOOP;
            end else begin
              st <= D_ALLOC;
            end
          end
        end

        D_ALLOC: begin
          ent[set_q][way_q] <= '{valid: 1'b1, addr: rq.addr, owned: 1'b0, owner: '0,
                                 sharers: '0, ptk: '0};
          st <= D_ACT;
        end

        D_ACT: begin
          victim_snoop <= 1'b0;
          got_dirty    <= 1'b0;
          unique case (rq.typ)
            REQ_GETS: begin
              if (e.owned && e.owner != src) begin
                to_send <= onehot(e.owner);
                to_ack  <= onehot(e.owner);
                snp     <= '{typ: SNP_DOWN, addr: rq.addr, pt: 1'b0};
                st      <= D_SNOOP;
              end else begin
                st <= D_AFTER;
              end
            end
            REQ_GETM: begin
              if ((holders(e) & ~onehot(src)) != '0) begin
                to_send <= holders(e) & ~onehot(src);
                to_ack  <= holders(e) & ~onehot(src);
                snp     <= '{typ: SNP_INV, addr: rq.addr, pt: e.ptk.gpt | e.ptk.npt};
                if (e.ptk.gpt | e.ptk.npt) cnt_pt_snoop <= cnt_pt_snoop + 1;
                st      <= D_SNOOP;
              end else begin
                st <= D_AFTER;
              end
            end
            REQ_PUTS, REQ_PUTM: begin
              if ((e.owned && e.owner == src) || (rq.typ == REQ_PUTS && e.sharers[src])) begin
                dentry_t n;
                n = e;
                if (e.owned && e.owner == src) begin
                  n.owned      = 1'b0;
                  n.sharers[src] = 1'b1;
                end
                if (e.ptk.gpt | e.ptk.npt) begin
                  cnt_lazy <= cnt_lazy + 1;     // page-table line: keep the sharer
                end else begin
                  n.sharers[src] = 1'b0;
                end
                if (!n.owned && n.sharers == '0) n.valid = 1'b0;
                ent[set_q][way_q] <= n;
                if (rq.typ == REQ_PUTM && e.owned && e.owner == src) begin
                  wb_addr <= rq.addr;
                  wb_data <= rq.data;
                  ret     <= R_IDLE;
                  st      <= D_MWR;
                end else begin
                  st <= D_IDLE;
                end
              end else begin
                if (e.sharers == '0 && !e.owned && !(e.ptk.gpt | e.ptk.npt))
                  ent[set_q][way_q].valid <= 1'b0;
                st <= D_IDLE;
              end
            end
            REQ_MARK: begin
              ent[set_q][way_q].ptk     <= e.ptk | rq.ptk;
              ent[set_q][way_q].sharers <= e.sharers | onehot(src);
              gtyp <= GNT_ACK;
              st   <= D_RSP;
            end
            default: st <= D_IDLE;
          endcase
        end

        D_SNOOP: begin
          logic [NCPU-1:0] sent, acked;
          sent  = to_send;
          acked = to_ack;
          for (int i = 0; i < NCPU; i++) begin
            if (to_send[i] && snp_ready[i]) sent[i] = 1'b0;
            if (ack_valid[i] && to_ack[i]) begin
              acked[i] = 1'b0;
              if (ack[i].dirty) begin
                got_dirty <= 1'b1;
                dline     <= ack[i].data;
              end
              if (snp.typ == SNP_INV && !ack[i].l1_hit && !ack[i].xl_hit)
                cnt_spurious <= cnt_spurious + 1;
              // a CPU with no match is demoted from the sharer list
              if (!ack[i].l1_hit && !ack[i].xl_hit)
                ent[set_q][way_q].sharers[i] <= 1'b0;
            end
          end
          to_send <= sent;
          to_ack  <= acked;
          if (acked == '0) st <= D_AFTER;
        end

        D_AFTER: begin
          if (victim_snoop) begin
            // the victim is gone from every private cache; write back if dirty
            ent[set_q][way_q].valid <= 1'b0;
            if (got_dirty) begin
              wb_addr <= e.addr;
              wb_data <= dline;
              ret     <= R_ALLOC;
              st      <= D_MWR;
            end else begin
              st <= D_ALLOC;
            end
          end else begin
            dentry_t n;
            n     = e;
            n.ptk = e.ptk | rq.ptk;
            if (rq.typ == REQ_GETM) begin
              n.owned   = 1'b1;
              n.owner   = src;
              n.sharers = onehot(src);
              gtyp     <= GNT_M;
            end else if (e.owned && e.owner != src) begin
              n.owned   = 1'b0;
              n.sharers = e.sharers | onehot(e.owner) | onehot(src);
              gtyp     <= GNT_S;
            end else if ((e.sharers & ~onehot(src)) == '0) begin
              n.owned   = 1'b1;
              n.owner   = src;
              n.sharers = onehot(src);
              gtyp     <= GNT_E;
            end else begin
              n.owned   = 1'b0;
              n.sharers = e.sharers | onehot(src);
              gtyp     <= GNT_S;
            end
            ent[set_q][way_q] <= n;
            if (got_dirty) begin
              wb_addr <= rq.addr;
              wb_data <= dline;
              ret     <= R_RSP;
              st      <= D_MWR;
            end else begin
              st <= D_MRD;
            end
          end
        end

        D_MWR: if (mem_ready) begin
          unique case (ret)
            R_ALLOC: st <= D_ALLOC;
            R_RSP:   st <= D_RSP;
            default: st <= D_IDLE;
          endcase
        end

        D_MRD:   if (mem_ready) st <= D_MWAIT;
        D_MWAIT: if (mem_rsp_valid) begin
          dline <= mem_rsp_data;
          st    <= D_RSP;
        end

        D_RSP: if (rsp_ready) st <= D_IDLE;

        default: st <= D_IDLE;
      endcase
    end
  end

  // a snoop is only sent while a transaction is in progress
  a_snoop_in_txn: assert property (@(posedge clk) disable iff (!rst_n)
                                   (snp_valid != '0) |-> (st == D_SNOOP));

endmodule
