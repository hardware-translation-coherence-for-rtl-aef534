// Private L1 data cache of one CPU, a MESI client of the coherence directories,
// with the translation-coherence relay.
//
// Two request ports share the cache: the core's load/store port and the page
// table walker's port.  The walker has priority.  A hit answers in two cycles
// (accept, then look up); a miss first evicts the victim way (PUTS for a clean
// line, PUTM with data for a dirty one), then sends GETS (read) or GETM (write
// or upgrade from S) and installs the line with the state the directory
// grants.  Walker reads carry the page-table kind (gPT or nPT) so that a
// directory entry allocated for them is marked; a walker mark request is
// forwarded to the directory as MARK and answered when it is acknowledged.
//
// Snoops from the directories are accepted in any cycle and take priority:
// the miss handler does nothing in a cycle with a snoop.  SNP_INV drops the
// line (returning it if it was M); SNP_DOWN turns M or E into S (returning
// the data if it was M).  When the snoop is for a page-table line (pt set) and
// is an invalidation it is also relayed, in the same cycle, to the MMU's
// translation structures (xl_inv_en/xl_inv_line; xl_inv_line is wired
// straight from the snoop's address bits, so its 14 bits follow an input),
// and their co-tag match comes back on xl_match.  The acknowledgement, one
// cycle later, reports whether the L1 (l1_hit) or a translation structure
// (xl_hit) held anything; when neither did, the message was spurious and the
// directory drops this CPU from the line's sharer list (the lazy sharer
// update of the paper).
//
// The paper gives the L1 only its 32 KB size and its part in the protocol.
// Associativity (8 ways), round-robin replacement, blocking single-miss
// operation and 64-bit access width are this design's own choices.
module l1_cache
  import hatric_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 32768,
  parameter int unsigned WAYS       = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // core port (8-byte aligned accesses to system physical addresses)
  input  logic        c_valid,
  input  logic        c_we,
  input  paddr_t      c_addr,
  input  logic [63:0] c_wdata,
  output logic        c_ready,
  output logic        c_rsp_valid,
  output logic [63:0] c_rsp_data,
  // walker port
  input  logic        w_valid,
  input  logic        w_mark,
  input  paddr_t      w_addr,
  input  ptkind_t     w_ptk,
  output logic        w_ready,
  output logic        w_rsp_valid,
  output logic [63:0] w_rsp_data,
  // to the directories
  output logic        req_valid,
  output cpu_req_t    req,
  input  logic        req_ready,
  input  logic        rsp_valid,
  input  dir_rsp_t    rsp,
  output logic        rsp_ready,
  // snoops from the directories
  input  logic        snp_valid,
  input  snoop_t      snp,
  output logic        ack_valid,
  output snoop_ack_t  ack,
  // relay to the translation structures
  output logic        xl_inv_en,
  output cotag_line_t xl_inv_line,
  input  logic        xl_match
);

  localparam int unsigned LINES = SIZE_BYTES / 64;
  localparam int unsigned SETS  = LINES / WAYS;
  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W = LADDR_W - SET_W;

  typedef enum logic [1:0] {MI = 2'd0, MS = 2'd1, ME = 2'd2, MM = 2'd3} mesi_e;

  mesi_e             stt  [SETS][WAYS];
  logic [TAG_W-1:0]  tag  [SETS][WAYS];
  line_t             data [SETS][WAYS];
  logic [WAY_W-1:0]  rr   [SETS];

  typedef enum logic [2:0] {L_IDLE, L_LOOK, L_EVICT, L_REQ, L_WAIT, L_MARK, L_MARKW} lstate_e;
  lstate_e st;

  // latched operation
  logic        op_w;      // from the walker
  logic        op_we;
  logic        op_mark;
  paddr_t      op_addr;
  logic [63:0] op_wdata;
  ptkind_t     op_ptk;
  logic [WAY_W-1:0] op_way;

  laddr_t           op_line;
  logic [SET_W-1:0] op_set;
  logic [TAG_W-1:0] op_tag;
  logic [2:0]       op_word;
  assign op_line = op_addr[PA_W-1:LINE_BITS];
  assign op_set  = op_line[SET_W-1:0];
  assign op_tag  = op_line[LADDR_W-1:SET_W];
  assign op_word = op_addr[5:3];

  // ---------------- lookup of the latched operation ----------------
  logic             hit;
  logic [WAY_W-1:0] hit_way;
  logic [WAY_W-1:0] vict_way;
  always_comb begin
    logic found;
    hit     = 1'b0;
    hit_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (stt[op_set][w] != MI && tag[op_set][w] == op_tag) begin
        hit     = 1'b1;
        hit_way = WAY_W'(w);
      end
    found    = 1'b0;
    vict_way = rr[op_set];
    for (int w = 0; w < WAYS; w++)
      if (!found && stt[op_set][w] == MI) begin
        found    = 1'b1;
        vict_way = WAY_W'(w);
      end
  end

  // ---------------- snoop lookup ----------------
  laddr_t           s_line;
  logic [SET_W-1:0] s_set;
  logic [TAG_W-1:0] s_tag;
  logic             s_hit;
  logic [WAY_W-1:0] s_way;
  assign s_line = snp.addr;
  assign s_set  = s_line[SET_W-1:0];
  assign s_tag  = s_line[LADDR_W-1:SET_W];
  always_comb begin
    s_hit = 1'b0;
    s_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (stt[s_set][w] != MI && tag[s_set][w] == s_tag) begin
        s_hit = 1'b1;
        s_way = WAY_W'(w);
      end
  end

  assign xl_inv_en   = snp_valid && snp.pt && (snp.typ == SNP_INV);
  assign xl_inv_line = cotag_line_of(snp.addr);

  // ---------------- ports ----------------
  assign w_ready   = (st == L_IDLE);
  assign c_ready   = (st == L_IDLE) && !w_valid;
  assign rsp_ready = !snp_valid && ((st == L_WAIT) || (st == L_MARKW));

  cpu_req_t req_q;
  assign req       = req_q;
  assign req_valid = (st == L_EVICT) || (st == L_REQ) || (st == L_MARK);

  function automatic line_t merge(input line_t l, input logic [2:0] wd, input logic [63:0] v);
    line_t r;
    r = l;
    r[64*wd +: 64] = v;
    return r;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st          <= L_IDLE;
      c_rsp_valid <= 1'b0;
      c_rsp_data  <= '0;
      w_rsp_valid <= 1'b0;
      w_rsp_data  <= '0;
      ack_valid   <= 1'b0;
      ack         <= '0;
      req_q       <= '0;
      op_w        <= 1'b0;
      op_we       <= 1'b0;
      op_mark     <= 1'b0;
      op_addr     <= '0;
      op_wdata    <= '0;
      op_ptk      <= '0;
      op_way      <= '0;
      for (int s = 0; s < SETS; s++) begin
        rr[s] <= '0;
        for (int w = 0; w < WAYS; w++) stt[s][w] <= MI;
      end
    end else begin
      c_rsp_valid <= 1'b0;
      w_rsp_valid <= 1'b0;
      ack_valid   <= 1'b0;

      // ---- snoop (has priority) ----
      if (snp_valid) begin
        ack_valid   <= 1'b1;
        ack.l1_hit  <= s_hit;
        ack.xl_hit  <= xl_inv_en && xl_match;
        ack.dirty   <= s_hit && stt[s_set][s_way] == MM;
        ack.data    <= data[s_set][s_way];
        if (s_hit) begin
          if (snp.typ == SNP_INV) stt[s_set][s_way] <= MI;
          else                    stt[s_set][s_way] <= MS;
        end
      end

      // ---- request handling ----
      unique case (st)
        L_IDLE: begin
          if (w_valid) begin
            op_w    <= 1'b1;
            op_we   <= 1'b0;
            op_mark <= w_mark;
            op_addr <= w_addr;
            op_ptk  <= w_ptk;
            st      <= L_LOOK;
          end else if (c_valid) begin
            op_w     <= 1'b0;
            op_we    <= c_we;
            op_mark  <= 1'b0;
            op_addr  <= c_addr;
            op_wdata <= c_wdata;
            op_ptk   <= '0;
            st       <= L_LOOK;
          end
        end
        L_LOOK: if (!snp_valid) begin
          if (op_mark) begin
            req_q <= '{typ: REQ_MARK, addr: op_line, ptk: op_ptk, data: '0};
            st    <= L_MARK;
          end else if (hit && (!op_we || stt[op_set][hit_way] != MS)) begin
            if (op_we) begin
              data[op_set][hit_way] <= merge(data[op_set][hit_way], op_word, op_wdata);
              stt[op_set][hit_way]  <= MM;
            end
            if (op_w) begin
              w_rsp_valid <= 1'b1;
              w_rsp_data  <= data[op_set][hit_way][64*op_word +: 64];
            end else begin
              c_rsp_valid <= 1'b1;
              c_rsp_data  <= data[op_set][hit_way][64*op_word +: 64];
            end
            st <= L_IDLE;
          end else if (hit) begin
            // write to a Shared line: upgrade in place
            op_way <= hit_way;
            req_q  <= '{typ: REQ_GETM, addr: op_line, ptk: '0, data: '0};
            st     <= L_REQ;
          end else begin
            op_way <= vict_way;
            if (stt[op_set][vict_way] != MI) begin
              req_q <= '{typ: (stt[op_set][vict_way] == MM) ? REQ_PUTM : REQ_PUTS,
                         addr: {tag[op_set][vict_way], op_set}, ptk: '0,
                         data: data[op_set][vict_way]};
              st    <= L_EVICT;
            end else begin
              req_q <= '{typ: op_we ? REQ_GETM : REQ_GETS, addr: op_line,
                         ptk: op_w ? op_ptk : '0, data: '0};
              st    <= L_REQ;
            end
            if (vict_way == rr[op_set])
              rr[op_set] <= WAY_W'((32'(rr[op_set]) + 1) % WAYS);
          end
        end
        L_EVICT: if (req_ready) begin
          stt[op_set][op_way] <= MI;
          req_q <= '{typ: op_we ? REQ_GETM : REQ_GETS, addr: op_line,
                     ptk: op_w ? op_ptk : '0, data: '0};
          st    <= L_REQ;
        end
        L_REQ:  if (req_ready) st <= L_WAIT;
        L_MARK: if (req_ready) st <= L_MARKW;
        L_WAIT: if (rsp_valid && rsp_ready) begin
          tag[op_set][op_way] <= op_tag;
          if (op_we) begin
            data[op_set][op_way] <= merge(rsp.data, op_word, op_wdata);
            stt[op_set][op_way]  <= MM;
          end else begin
            data[op_set][op_way] <= rsp.data;
            stt[op_set][op_way]  <= (rsp.typ == GNT_E) ? ME :
                                    (rsp.typ == GNT_M) ? MM : MS;
          end
          if (op_w) begin
            w_rsp_valid <= 1'b1;
            w_rsp_data  <= rsp.data[64*op_word +: 64];
          end else begin
            c_rsp_valid <= 1'b1;
            c_rsp_data  <= rsp.data[64*op_word +: 64];
          end
          st <= L_IDLE;
        end
        L_MARKW: if (rsp_valid && rsp_ready) begin
          w_rsp_valid <= 1'b1;
          w_rsp_data  <= '0;
          st          <= L_IDLE;
        end
        default: st <= L_IDLE;
      endcase
    end
  end

  // a request is held stable until it is accepted
  property p_req_stable;
    @(posedge clk) disable iff (!rst_n) req_valid && !req_ready |=> req_valid && $stable(req);
  endproperty
  a_req_stable: assert property (p_req_stable);

endmodule
