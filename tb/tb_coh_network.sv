// Self-checking test of the CPU/bank interconnect (4 CPUs, 2 banks).
// Checked: a request reaches the bank its line address selects, with the
// right source; competing CPUs are served round-robin; a grant reaches only
// the CPU it names and its ready returns to the bank; a CPU targeted by two
// banks takes the lower bank's snoop first; each acknowledgement returns to
// the bank whose snoop it answers.
module tb_coh_network;
  import hatric_pkg::*;

  localparam int unsigned NCPU = 4, NBANKS = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NCPU-1:0]   c_req_valid, c_req_ready, c_rsp_valid, c_rsp_ready, c_snp_valid, c_ack_valid;
  cpu_req_t          c_req [NCPU];
  dir_rsp_t          c_rsp [NCPU];
  snoop_t            c_snp [NCPU];
  logic [NBANKS-1:0] b_req_valid, b_req_ready, b_rsp_valid, b_rsp_ready;
  cpu_req_t          b_req [NBANKS];
  logic [1:0]        b_req_src [NBANKS];
  dir_rsp_t          b_rsp [NBANKS];
  logic [1:0]        b_rsp_dst [NBANKS];
  logic [NCPU-1:0]   b_snp_valid [NBANKS];
  snoop_t            b_snp [NBANKS];
  logic [NCPU-1:0]   b_snp_ready [NBANKS];
  logic [NCPU-1:0]   b_ack_valid [NBANKS];

  coh_network #(.NCPU(NCPU), .NBANKS(NBANKS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order [$];
    c_req_valid = '0; c_rsp_ready = '1; c_ack_valid = '0;
    b_req_ready = '0; b_rsp_valid = '0; 
    for (int i = 0; i < NCPU; i++) c_req[i] = '0;
    for (int b = 0; b < NBANKS; b++) begin
      b_rsp[b] = '0; b_rsp_dst[b] = '0; b_snp_valid[b] = '0; b_snp[b] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // routing: CPU 2 asks for an odd line -> bank 1
    c_req_valid[2] = 1'b1; c_req[2] = '{typ: REQ_GETS, addr: 46'h13, ptk: '0, data: '0};
    #1;
    check(b_req_valid == 2'b10 && b_req_src[1] == 2'd2 && b_req[1].addr == 46'h13, "routed to bank 1");
    check(c_req_ready[2] == 1'b0, "not accepted while bank busy");
    b_req_ready = 2'b10;
    #1;
    check(c_req_ready[2], "accepted when bank ready");
    @(negedge clk);
    c_req_valid = '0; b_req_ready = '0;

    // round robin: all four CPUs ask bank 0; bank accepts one per cycle
    for (int i = 0; i < NCPU; i++) begin
      c_req_valid[i] = 1'b1; c_req[i] = '{typ: REQ_GETM, addr: 46'(2 * i), ptk: '0, data: '0};
    end
    b_req_ready = 2'b01;
    for (int n = 0; n < NCPU; n++) begin
      #1;
      order.push_back(int'(b_req_src[0]));
      check(b_req_valid[0] && c_req_ready[b_req_src[0]], "one accepted per cycle");
      @(negedge clk);
      c_req_valid[order[n]] = 1'b0;
    end
    begin
      bit seen [NCPU];
      foreach (order[k]) seen[order[k]] = 1'b1;
      check(seen[0] && seen[1] && seen[2] && seen[3], "every CPU served once");
    end
    b_req_ready = '0;

    // grant steering
    b_rsp_valid = 2'b01; b_rsp_dst[0] = 2'd3; b_rsp[0] = '{typ: GNT_M, data: {16{32'hCAFE0003}}};
    c_rsp_ready = 4'b0111;
    #1;
    check(c_rsp_valid == 4'b1000 && c_rsp[3].typ == GNT_M, "grant to CPU 3 only");
    check(!b_rsp_ready[0], "bank waits for the CPU");
    c_rsp_ready = 4'b1111;
    #1;
    check(b_rsp_ready[0], "ready returned to the bank");
    @(negedge clk);
    b_rsp_valid = '0;

    // snoops: both banks target CPU 1, bank 1 also CPU 0
    b_snp_valid[0] = 4'b0010; b_snp[0] = '{typ: SNP_INV, addr: 46'h20, pt: 1'b1};
    b_snp_valid[1] = 4'b0011; b_snp[1] = '{typ: SNP_DOWN, addr: 46'h31, pt: 1'b0};
    #1;
    check(c_snp_valid == 4'b0011 && c_snp[1].addr == 46'h20 && c_snp[0].addr == 46'h31,
          "lower bank wins CPU 1, CPU 0 gets bank 1");
    check(b_snp_ready[0] == 4'b0010 && b_snp_ready[1] == 4'b0001, "snoop readies");
    @(negedge clk);
    b_snp_valid[0] = '0; b_snp_valid[1] = 4'b0010;
    c_ack_valid = 4'b0011;
    #1;
    check(b_ack_valid[0] == 4'b0010 && b_ack_valid[1] == 4'b0001, "acks back to their banks");
    check(c_snp_valid[1] && c_snp[1].addr == 46'h31, "bank 1's snoop follows");
    @(negedge clk);
    b_snp_valid[1] = '0;
    c_ack_valid = 4'b0010;
    #1;
    check(b_ack_valid[1] == 4'b0010 && b_ack_valid[0] == 4'b0000, "second ack to bank 1");
    @(negedge clk);
    c_ack_valid = '0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
