// tb_l1_cache: self-checking test of one sRSP L1 cache against a simple
// L2 stand-in written in this testbench (a word memory that answers reads
// and atomics after L2_LAT cycles, answers selective-flush/invalidate
// requests at once and accepts every write-back).
// It walks the local/remote release and acquire sequences of the sRSP
// protocol and checks: loaded values, the 4-cycle hit latency, which
// messages reach the L2 and in which order, which blocks a selective flush
// writes back (only up to the recorded release), PA-TBL promotion of a local
// acquire, the same-CU shortcut of a remote acquire, and the sFIFO overflow
// write-back.
module tb_l1_cache;
  import srsp_pkg::*;
  localparam int unsigned L2_LAT = 10;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cu_req_valid = 1'b0, cu_req_ready, cu_resp_valid;
  cu_req_t cu_req = '0;
  word_t cu_resp_rdata;
  logic l2_req_valid, l2_req_ready, l2_resp_valid = 1'b0;
  l2_req_t l2_req;
  l2_resp_t l2_resp = '0;
  logic wb_valid, wb_ready;
  wb_t wb;
  logic prb_valid = 1'b0, prb_ack;
  prb_kind_e prb_kind = PRB_SELFLUSH;
  line_addr_t prb_line = '0;
  int checks = 0, failures = 0;

  l1_cache dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------ L2 stand-in
  word_t      l2m[int];           // keyed by word address
  l2_kind_e   req_log[$];
  line_addr_t wb_log[$];

  function automatic word_t rdw(int wa);
    return l2m.exists(wa) ? l2m[wa] : 32'h0;
  endfunction

  assign wb_ready = wb_valid;     // accept every write-back at once
  always @(negedge clk) if (wb_valid && wb_ready) begin
    wb_log.push_back(wb.line);
    for (int i = 0; i < LINE_WORDS; i++)
      if (wb.mask[i]) l2m[int'(wb.line) * LINE_WORDS + i] = wb.data[i];
  end

  logic busy = 1'b0;
  assign l2_req_ready = !busy;
  initial begin
    forever begin
      @(negedge clk);
      if (l2_req_valid && l2_req_ready) begin
        l2_req_t r;
        r = l2_req;
        @(posedge clk);           // handshake at this edge
        #1 busy = 1'b1;
        req_log.push_back(r.kind);
        if (r.kind == L2_RD || r.kind == L2_ATOM) repeat (L2_LAT - 1) @(posedge clk);
        @(negedge clk);
        if (r.kind == L2_RD)
          for (int i = 0; i < LINE_WORDS; i++) l2_resp.data[i] = rdw(int'(r.line) * LINE_WORDS + i);
        if (r.kind == L2_ATOM) begin
          int wa;
          wa = int'(r.line) * LINE_WORDS + int'(r.woff);
          l2_resp.rdata = rdw(wa);
          l2m[wa] = amo_apply(r.amo, rdw(wa), r.wdata, r.cmp);
        end
        l2_resp_valid = 1'b1;
        @(negedge clk);
        l2_resp_valid = 1'b0;
        busy = 1'b0;
      end
    end
  end

  // ------------------------------------------------ CU side
  int lat;
  task automatic cu(cu_op_e op, amo_e amo, scope_e sc, sem_e sem, bit rem,
                    addr_t a, word_t wd, word_t cmpv, output word_t rd);
    @(negedge clk);
    cu_req_valid = 1'b1;
    cu_req = '{op: op, amo: amo, scope: sc, sem: sem, remote: rem, addr: a, wdata: wd, cmp: cmpv};
    while (!cu_req_ready) @(negedge clk);
    @(negedge clk);               // accepted at the edge just passed
    cu_req_valid = 1'b0;
    lat = 1;
    while (!cu_resp_valid) begin
      @(negedge clk);
      lat++;
    end
    rd = cu_resp_rdata;
  endtask

  task automatic probe(prb_kind_e k, line_addr_t l);
    @(negedge clk);
    prb_valid = 1'b1; prb_kind = k; prb_line = l;
    while (!prb_ack) @(negedge clk);
    prb_valid = 1'b0;             // the L2 drops the probe when it sees the ack
    @(negedge clk);
  endtask

  function automatic line_addr_t la(addr_t a);
    return a[ADDR_W-1 -: LINE_AW];
  endfunction

  localparam addr_t Y = 19'h01000, L = 19'h02040, X = 19'h03080, A = 19'h04000,
                    M = 19'h05000, Z = 19'h06000;
  word_t r;

  initial begin
    l2m[int'(A) / 4] = 32'hA5A5_0001;
    l2m[int'(L) / 4] = 32'd7;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // plain load miss, then hit with the 4-cycle latency
    cu(OP_LD, AMO_LD, SCOPE_WG, SEM_NONE, 0, A, 0, 0, r);
    check(r == 32'hA5A5_0001, "load miss value");
    check(req_log.size() == 1 && req_log[0] == L2_RD, "load miss reads the L2");
    cu(OP_LD, AMO_LD, SCOPE_WG, SEM_NONE, 0, A, 0, 0, r);
    check(r == 32'hA5A5_0001 && lat == 4, $sformatf("load hit value/latency (lat=%0d)", lat));
    check(req_log.size() == 1, "load hit stays in the L1");

    // Fig. 1a: ST Y,1 then atomic_ST_rel_wg L,0 (local release)
    req_log.delete();
    cu(OP_ST, AMO_ST, SCOPE_WG, SEM_NONE, 0, Y, 1, 0, r);   // allocates the block
    cu(OP_ST, AMO_ST, SCOPE_WG, SEM_NONE, 0, Y, 1, 0, r);   // hits
    check(lat == 4, $sformatf("store hit latency (lat=%0d)", lat));
    check(dut.u_sfifo.count == 2, "every write pushes its block");
    cu(OP_LD, AMO_LD, SCOPE_WG, SEM_NONE, 0, Y, 0, 0, r);
    check(r == 1, "load after store");
    cu(OP_ATOM, AMO_ST, SCOPE_WG, SEM_REL, 0, L, 0, 0, r);
    check(r == 7, "local release returns old L");
    check(rdw(int'(Y)/4) == 0, "local release writes nothing back");
    check(dut.u_sfifo.count == 3, "sFIFO holds Y, Y and L");
    cu(OP_ST, AMO_ST, SCOPE_WG, SEM_NONE, 0, X, 5, 0, r);     // write after the release

    // Fig. 2 step 3: selective flush probe for L flushes Y and L, not X
    wb_log.delete();
    probe(PRB_SELFLUSH, la(L));
    check(wb_log.size() == 2 && wb_log[0] == la(Y) && wb_log[1] == la(L),
          "selective flush writes back Y (once, clean duplicate skipped) then L");
    check(rdw(int'(Y)/4) == 1 && rdw(int'(L)/4) == 0, "Y and L at the L2");
    check(rdw(int'(X)/4) == 0, "X (after the release) not written back");
    check(dut.u_sfifo.count == 1, "X stays in the sFIFO");
    check(dut.u_pa_tbl.valid_q[0] && dut.u_pa_tbl.line_q[0] == la(L), "L entered into PA-TBL");

    // selective flush for an address this cache never released: plain ack
    wb_log.delete();
    probe(PRB_SELFLUSH, la(M));
    check(wb_log.size() == 0, "selective flush miss writes nothing");

    // Fig. 1b with PA-TBL hit: promoted acquire (flush X, invalidate, CAS at L2)
    req_log.delete(); wb_log.delete();
    l2m[int'(L)/4] = 32'd0;
    cu(OP_ATOM, AMO_CAS, SCOPE_WG, SEM_ACQ, 0, L, 1, 0, r);
    check(r == 0 && rdw(int'(L)/4) == 1, "promoted CAS done at the L2");
    check(wb_log.size() == 1 && wb_log[0] == la(X), "promotion flushes X first");
    check(req_log.size() == 1 && req_log[0] == L2_ATOM, "promoted acquire sends the atomic to L2");
    check(dut.u_pa_tbl.valid_q[0] == 0, "invalidation clears PA-TBL");
    l2m[int'(Y)/4] = 32'd2;                                    // remote sharer changed Y
    req_log.delete();
    cu(OP_LD, AMO_LD, SCOPE_WG, SEM_NONE, 0, Y, 0, 0, r);
    check(r == 2 && req_log.size() == 1, "after invalidation Y is re-read from L2");

    // Fig. 1b without PA-TBL entry: CAS stays local, its block enters the sFIFO
    req_log.delete();
    cu(OP_ATOM, AMO_CAS, SCOPE_WG, SEM_ACQ, 0, Y, 9, 2, r);
    check(r == 2 && req_log.size() == 0, "unpromoted acquire is local");
    check(dut.u_sfifo.count == 1, "local CAS pushed its block");
    cu(OP_LD, AMO_LD, SCOPE_WG, SEM_NONE, 0, Y, 0, 0, r);
    check(r == 9, "local CAS result visible");

    // selective invalidate probe (another CU's remote release) puts Z in PA-TBL
    probe(PRB_SELINV, la(Z));
    check(dut.u_pa_tbl.valid_q[0] && dut.u_pa_tbl.line_q[0] == la(Z), "selective invalidate fills PA-TBL");

    // remote acquire of M from this cache: SELFLUSH request, own flush, invalidate, CAS at L2
    req_log.delete(); wb_log.delete();
    cu(OP_ATOM, AMO_CAS, SCOPE_CMP, SEM_ACQ, 1, M, 1, 0, r);
    check(req_log.size() == 2 && req_log[0] == L2_SELFLUSH && req_log[1] == L2_ATOM,
          "remote acquire: selective flush request then atomic");
    check(wb_log.size() == 1 && wb_log[0] == la(Y), "remote acquire flushes own dirty blocks");
    check(r == 0 && rdw(int'(M)/4) == 1, "remote acquire CAS at L2");
    check(dut.u_sfifo.count == 0 && !dut.u_pa_tbl.valid_q[0], "own sFIFO empty, tables cleared");

    // remote release: flush, atomic at L2, then selective invalidate request
    cu(OP_ST, AMO_ST, SCOPE_WG, SEM_NONE, 0, Y, 3, 0, r);
    req_log.delete(); wb_log.delete();
    cu(OP_ATOM, AMO_ST, SCOPE_CMP, SEM_REL, 1, M, 0, 0, r);
    check(req_log.size() == 2 && req_log[0] == L2_ATOM && req_log[1] == L2_SELINV,
          "remote release: atomic then selective invalidate");
    check(wb_log.size() == 1 && rdw(int'(Y)/4) == 3, "remote release flushes Y");
    check(rdw(int'(M)/4) == 0, "remote release stores M at L2");

    // remote acquire whose local sharer runs on this CU: handled locally
    cu(OP_ATOM, AMO_ST, SCOPE_WG, SEM_REL, 0, Z, 0, 0, r);     // local release of Z
    req_log.delete();
    cu(OP_ATOM, AMO_CAS, SCOPE_CMP, SEM_ACQ, 1, Z, 1, 0, r);
    check(req_log.size() == 0 && r == 0, "remote acquire with own LR-TBL hit stays local");

    // sFIFO overflow: the 17th write pops and writes back the oldest block
    probe(PRB_SELFLUSH, la(Z));                                // drain to a known state
    cu(OP_ATOM, AMO_LD, SCOPE_CMP, SEM_REL, 0, A, 0, 0, r);     // device release drains all
    check(dut.u_sfifo.count == 0, "device-scope release drains the sFIFO");
    wb_log.delete();
    for (int i = 0; i < 16; i++)
      cu(OP_ST, AMO_ST, SCOPE_WG, SEM_NONE, 0, addr_t'(19'h10000 + i * 64), 32'(i + 100), 0, r);
    check(wb_log.size() == 0 && dut.u_sfifo.full, "16 writes fill the sFIFO");
    cu(OP_ST, AMO_ST, SCOPE_WG, SEM_NONE, 0, 19'h20000, 32'd55, 0, r);
    check(wb_log.size() == 1 && wb_log[0] == la(19'h10000) && rdw(19'h10000 / 4) == 100,
          "overflow writes back the oldest block");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
