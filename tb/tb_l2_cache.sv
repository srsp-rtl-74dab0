// tb_l2_cache: self-checking test of the shared L2 with four L1 ports
// driven by this testbench. Checks masked write-backs, the 24-cycle read and
// atomic latency, CAS results, the selective-flush broadcast (every L1 but
// the requester, answered only after all acks, write-backs accepted
// meanwhile), the block lock (a read of the locked block from another L1
// waits while other blocks are served, and is released by the owner's
// atomic), and the selective-invalidate broadcast to every L1.
module tb_l2_cache;
  import srsp_pkg::*;
  localparam int unsigned N = 4, LAT = 24;

  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid[N], req_ready[N], resp_valid[N];
  l2_req_t req[N];
  l2_resp_t resp;
  logic wb_valid[N], wb_ready[N];
  wb_t wb[N];
  logic prb_valid[N], prb_ack[N];
  prb_kind_e prb_kind;
  line_addr_t prb_line;
  int checks = 0, failures = 0;

  l2_cache #(.N_CU(N), .MEM_BYTES(8192), .LAT(LAT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic l2_req_t mk(l2_kind_e k, line_addr_t l, int wo, amo_e a, word_t wd, word_t c,
                                 bit h = 1'b0);
    return '{kind: k, line: l, woff: woff_t'(wo), amo: a, wdata: wd, cmp: c, hold: h};
  endfunction

  // issue a request on port p and wait until it is accepted
  task automatic issue(int p, l2_req_t r);
    @(negedge clk);
    req_valid[p] = 1'b1; req[p] = r;
    #1;                           // let the combinational ready settle
    while (!req_ready[p]) begin @(negedge clk); #1; end
    @(negedge clk);
    req_valid[p] = 1'b0;
  endtask

  // wait for the response on port p; returns cycles since acceptance
  task automatic wait_resp(int p, output l2_resp_t rs, output int cyc);
    cyc = 1;
    while (!resp_valid[p]) begin @(negedge clk); cyc++; end
    rs = resp;
  endtask

  task automatic do_wb(int p, line_addr_t l, wmask_t m, word_t base);
    @(negedge clk);
    wb_valid[p] = 1'b1; wb[p].line = l; wb[p].mask = m;
    for (int i = 0; i < LINE_WORDS; i++) wb[p].data[i] = base + word_t'(i);
    #1;
    while (!wb_ready[p]) begin @(negedge clk); #1; end
    @(negedge clk);
    wb_valid[p] = 1'b0;
  endtask

  l2_resp_t rs;
  int cyc;
  localparam line_addr_t LL = 13'd5, YY = 13'd9, QQ = 13'd17;

  initial begin
    for (int p = 0; p < N; p++) begin
      req_valid[p] = 0; req[p] = '0; wb_valid[p] = 0; wb[p] = '0; prb_ack[p] = 0;
    end
    for (int l = 0; l < 128; l++) for (int w = 0; w < LINE_WORDS; w++) dut.mem[l][w] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // masked write-back, then read with the 24-cycle latency
    do_wb(1, YY, 16'h00F0, 32'h100);
    issue(0, mk(L2_RD, YY, 0, AMO_LD, 0, 0));
    wait_resp(0, rs, cyc);
    check(cyc == LAT, $sformatf("read latency %0d", cyc));
    check(rs.data[4] == 32'h104 && rs.data[7] == 32'h107 && rs.data[3] == 0 && rs.data[8] == 0,
          "write-back mask respected");

    // CAS at the L2
    issue(2, mk(L2_ATOM, LL, 3, AMO_CAS, 1, 0));
    wait_resp(2, rs, cyc);
    check(rs.rdata == 0 && cyc == LAT, $sformatf("CAS old value %0d and latency %0d", rs.rdata, cyc));
    issue(2, mk(L2_ATOM, LL, 3, AMO_CAS, 5, 0));
    wait_resp(2, rs, cyc);
    check(rs.rdata == 1 && dut.mem[LL][3] == 1, "failing CAS leaves value");
    issue(2, mk(L2_ATOM, LL, 3, AMO_ST, 0, 0));               // L <- 0
    wait_resp(2, rs, cyc);

    // remote acquire from port 1: selective flush to 0, 2, 3
    issue(1, mk(L2_SELFLUSH, LL, 3, AMO_CAS, 1, 0));
    @(negedge clk);
    check(prb_valid[0] && !prb_valid[1] && prb_valid[2] && prb_valid[3], "probe to all but requester");
    check(prb_kind == PRB_SELFLUSH && prb_line == LL, "probe kind and address");
    // local sharer (port 0) writes back during the probe
    do_wb(0, LL, 16'h0008, 32'h0);                             // word 3 <- 3
    check(dut.mem[LL][3] == 3, "write-back accepted during probe");
    prb_ack[2] = 1; prb_ack[3] = 1; @(negedge clk); prb_ack[2] = 0; prb_ack[3] = 0;
    repeat (3) @(negedge clk);
    check(!resp_valid[1] && prb_valid[0], "no answer before the last ack");
    prb_ack[0] = 1; @(negedge clk); prb_ack[0] = 0;
    wait_resp(1, rs, cyc);
    check(cyc <= 2, "selective flush answered after the last ack");

    // lock: port 0 read of L waits, port 2 read of Q is served
    fork
      begin
        issue(0, mk(L2_RD, LL, 0, AMO_LD, 0, 0));
        wait_resp(0, rs, cyc);
        check(rs.data[3] == 32'd4, "read after unlock sees the remote acquire's value");
      end
      begin
        repeat (2) @(negedge clk);
        issue(2, mk(L2_RD, QQ, 0, AMO_LD, 0, 0));
        wait_resp(2, rs, cyc);
        check(req_valid[0] && !req_ready[0], "read of locked block held while others served");
        repeat (5) @(negedge clk);
        issue(1, mk(L2_ATOM, LL, 3, AMO_CAS, 4, 3));          // owner's CAS 3 -> 4
        wait_resp(1, rs, cyc);
        check(rs.rdata == 3, "owner's CAS sees the flushed value");
      end
    join
    check(!dut.lock_valid_q, "lock released");

    // remote release from port 3: atomic with hold locks the block ...
    issue(3, mk(L2_ATOM, LL, 3, AMO_ST, 0, 0, 1'b1));
    wait_resp(3, rs, cyc);
    @(negedge clk);
    check(dut.lock_valid_q && dut.lock_owner_q == 2'd3, "remote release atomic locks the block");
    @(negedge clk);
    req_valid[0] = 1'b1; req[0] = mk(L2_RD, LL, 0, AMO_LD, 0, 0);
    // ... and its selective invalidate goes to every L1
    issue(3, mk(L2_SELINV, LL, 3, AMO_ST, 0, 0));
    @(negedge clk);
    check(prb_valid[0] && prb_valid[1] && prb_valid[2] && prb_valid[3], "invalidate to every L1");
    check(prb_kind == PRB_SELINV, "invalidate kind");
    for (int p = 0; p < N; p++) prb_ack[p] = 1;
    @(negedge clk);
    for (int p = 0; p < N; p++) prb_ack[p] = 0;
    wait_resp(3, rs, cyc);
    check(cyc <= 3, "invalidate answered");
    check(req_valid[0] && !dut.lock_valid_q, "read held until the invalidation, then unlocked");
    #1;
    while (!req_ready[0]) begin @(negedge clk); #1; end
    @(negedge clk); req_valid[0] = 1'b0;
    wait_resp(0, rs, cyc);
    check(rs.data[3] == 0, "read after remote release sees the released value");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
