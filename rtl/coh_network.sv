// On-chip interconnect between the CPU tiles and the directory banks.
//
// Lines are interleaved across banks by the low line-address bits.  For each
// bank a round-robin arbiter picks one of the CPUs whose pending request maps
// to it; the CPU's request is accepted when its grant and the bank's
// req_ready meet.  Grants from a bank are steered to the CPU named by
// rsp_dst.  Each CPU takes at most one snoop per cycle: among the banks that
// hold a snoop for it, the lowest-numbered one wins.  The CPU's snoop
// acknowledgement comes one cycle after the snoop and is steered back to the
// bank recorded for it.
//
// The paper shows CPUs, LLC banks and per-bank directories but not the
// network between them; this crossbar, its zero-latency combinational paths
// and its arbitration are this design's own choices.  The only register is
// the per-CPU record of which bank the last accepted snoop came from.
module coh_network
  import hatric_pkg::*;
#(
  parameter int unsigned NCPU   = 32,
  parameter int unsigned NBANKS = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // CPU side
  input  logic [NCPU-1:0]         c_req_valid,
  input  cpu_req_t                c_req [NCPU],
  output logic [NCPU-1:0]         c_req_ready,
  output logic [NCPU-1:0]         c_rsp_valid,
  output dir_rsp_t                c_rsp [NCPU],
  input  logic [NCPU-1:0]         c_rsp_ready,
  output logic [NCPU-1:0]         c_snp_valid,
  output snoop_t                  c_snp [NCPU],
  input  logic [NCPU-1:0]         c_ack_valid,
  // bank side
  output logic [NBANKS-1:0]       b_req_valid,
  output cpu_req_t                b_req [NBANKS],
  output logic [$clog2(NCPU)-1:0] b_req_src [NBANKS],
  input  logic [NBANKS-1:0]       b_req_ready,
  input  logic [NBANKS-1:0]       b_rsp_valid,
  input  dir_rsp_t                b_rsp [NBANKS],
  input  logic [$clog2(NCPU)-1:0] b_rsp_dst [NBANKS],
  output logic [NBANKS-1:0]       b_rsp_ready,
  input  logic [NCPU-1:0]         b_snp_valid [NBANKS],
  input  snoop_t                  b_snp [NBANKS],
  output logic [NCPU-1:0]         b_snp_ready [NBANKS],
  output logic [NCPU-1:0]         b_ack_valid [NBANKS]
);

  localparam int unsigned CPU_W  = $clog2(NCPU);
  localparam int unsigned BANK_W = (NBANKS > 1) ? $clog2(NBANKS) : 1;

  function automatic logic [BANK_W-1:0] bank_of(input laddr_t a);
    if (NBANKS > 1) return a[BANK_W-1:0];
    else            return '0;
  endfunction

  // ---------------- requests ----------------
  logic [CPU_W-1:0] rr  [NBANKS];
  logic [CPU_W-1:0] gnt [NBANKS];
  always_comb begin
    c_req_ready = '0;
    for (int b = 0; b < NBANKS; b++) begin
      logic found;
      found          = 1'b0;
      gnt[b]         = '0;
      for (int k = 0; k < NCPU; k++) begin
        int unsigned i;
        i = (32'(rr[b]) + 32'(k)) % NCPU;
        if (!found && c_req_valid[i] && 32'(bank_of(c_req[i].addr)) == 32'(b)) begin
          found  = 1'b1;
          gnt[b] = CPU_W'(i);
        end
      end
      b_req_valid[b] = found;
      b_req[b]       = c_req[gnt[b]];
      b_req_src[b]   = gnt[b];
      if (found && b_req_ready[b]) c_req_ready[gnt[b]] = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int b = 0; b < NBANKS; b++) rr[b] <= '0;
    end else begin
      for (int b = 0; b < NBANKS; b++)
        if (b_req_valid[b] && b_req_ready[b])
          rr[b] <= CPU_W'((32'(gnt[b]) + 1) % NCPU);
    end
  end

  // ---------------- grants ----------------
  always_comb begin
    b_rsp_ready = '0;
    for (int i = 0; i < NCPU; i++) begin
      logic found;
      found          = 1'b0;
      c_rsp_valid[i] = 1'b0;
      c_rsp[i]       = b_rsp[0];
      for (int b = 0; b < NBANKS; b++)
        if (!found && b_rsp_valid[b] && 32'(b_rsp_dst[b]) == 32'(i)) begin
          found          = 1'b1;
          c_rsp_valid[i] = 1'b1;
          c_rsp[i]       = b_rsp[b];
          b_rsp_ready[b] = c_rsp_ready[i];
        end
    end
  end

  // ---------------- snoops and acknowledgements ----------------
  logic [BANK_W-1:0] sbank   [NCPU];
  logic [BANK_W-1:0] ack_bank [NCPU];
  always_comb begin
    for (int b = 0; b < NBANKS; b++) b_snp_ready[b] = '0;
    for (int i = 0; i < NCPU; i++) begin
      logic found;
      found          = 1'b0;
      sbank[i]       = '0;
      c_snp_valid[i] = 1'b0;
      for (int b = 0; b < NBANKS; b++)
        if (!found && b_snp_valid[b][i]) begin
          found    = 1'b1;
          sbank[i] = BANK_W'(b);
        end
      c_snp_valid[i] = found;
      c_snp[i]       = b_snp[sbank[i]];
      if (found) b_snp_ready[sbank[i]][i] = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NCPU; i++) ack_bank[i] <= '0;
    end else begin
      for (int i = 0; i < NCPU; i++)
        if (c_snp_valid[i]) ack_bank[i] <= sbank[i];
    end
  end

  always_comb begin
    for (int b = 0; b < NBANKS; b++)
      for (int i = 0; i < NCPU; i++)
        b_ack_valid[b][i] = c_ack_valid[i] && 32'(ack_bank[i]) == 32'(b);
  end

endmodule
