// tb_srsp_top: end-to-end test of the sRSP memory system at its default
// size (64 compute units, 16 kB L1s, 512 kB L2).
//
// Phase 1 replays the paper-style example: CU0 (local sharer) writes Y and
// releases lock L at work-group scope; CU1 (remote sharer) takes L with a
// remote acquire, must see Y, updates Y and leaves with a remote release;
// CU0's next local acquire is then promoted and sees the new Y.
// Phase 2 is a lock stress in the style of a work-stealing queue: CU0 runs
// many critical sections with work-group scope while three other CUs
// "steal" with remote acquire/release and four more CUs run unrelated
// traffic. Every critical section increments a shared counter; mutual
// exclusion is checked on every entry and the final counter must equal the
// number of sections. Critical sections also write private blocks that all
// map to one L1 set, forcing evictions and sFIFO overflows.
// Every mechanism of the design is counted and must occur at least once.
module tb_srsp_top;
  import srsp_pkg::*;
  localparam int unsigned N = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  logic    cu_req_valid[N], cu_req_ready[N], cu_resp_valid[N];
  cu_req_t cu_req[N];
  word_t   cu_resp_rdata[N];
  int checks = 0, failures = 0;

  srsp_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cu_op(int c, cu_op_e op, amo_e amo, scope_e sc, sem_e sem, bit rem,
                       addr_t a, word_t wd, word_t cv, output word_t rd);
    @(negedge clk);
    cu_req_valid[c] = 1'b1;
    cu_req[c] = '{op: op, amo: amo, scope: sc, sem: sem, remote: rem, addr: a, wdata: wd, cmp: cv};
    while (!cu_req_ready[c]) @(negedge clk);
    @(negedge clk);
    cu_req_valid[c] = 1'b0;
    while (!cu_resp_valid[c]) @(negedge clk);
    rd = cu_resp_rdata[c];
  endtask

  function automatic word_t l2w(addr_t a);
    return dut.u_l2.mem[a[ADDR_W-1 -: LINE_AW]][a[5:2]];
  endfunction

  // ------------------------------------------------ mechanism counters
  int n_lr_upd[N], n_sf_hit[N], n_sf_prb[N], n_si_prb[N], n_promo[N], n_inval[N],
      n_keep[N], n_ovf[N], n_evict[N];
  int n_lock_stall = 0, n_shortcut = 0;

  for (genvar c = 0; c < N; c++) begin : g_mon
    initial begin
      n_lr_upd[c] = 0; n_sf_hit[c] = 0; n_sf_prb[c] = 0; n_si_prb[c] = 0; n_promo[c] = 0;
      n_inval[c] = 0; n_keep[c] = 0; n_ovf[c] = 0; n_evict[c] = 0;
    end
    always @(negedge clk) if (rst_n) begin
      if (dut.g_cu[c].u_l1.lr_upd) n_lr_upd[c]++;
      if (dut.g_cu[c].u_l1.pa_ins && !dut.g_cu[c].u_l1.keep_promo &&
          dut.prb_kind == PRB_SELFLUSH) n_sf_hit[c]++;
      if (dut.g_cu[c].u_l1.prb_ack && dut.prb_kind == PRB_SELFLUSH) n_sf_prb[c]++;
      if (dut.g_cu[c].u_l1.prb_ack && dut.prb_kind == PRB_SELINV) n_si_prb[c]++;
      if (dut.g_cu[c].u_l1.tbl_clear) n_inval[c]++;
      if (dut.g_cu[c].u_l1.tbl_clear && dut.g_cu[c].u_l1.f_promoted_q) n_promo[c]++;
      if (dut.g_cu[c].u_l1.keep_promo) n_keep[c]++;
      if (dut.g_cu[c].u_l1.sf_pop && dut.g_cu[c].u_l1.flush_mode_q == 2'd2) n_ovf[c]++;
      if (dut.wb_valid[c] && dut.wb_ready[c] && !dut.g_cu[c].u_l1.sf_pop) n_evict[c]++;
    end
  end
  always @(negedge clk) if (rst_n && dut.u_l2.blocked != '0) n_lock_stall++;

  function automatic int total(int v[N]);
    int s = 0;
    foreach (v[i]) s += v[i];
    return s;
  endfunction

  // ------------------------------------------------ addresses
  localparam addr_t L = 19'h00040, Y = 19'h01000, D = 19'h02000, X = 19'h03000;
  // private blocks of CU c: 20 blocks in L1 set 5 (block addresses 16k+5)
  function automatic addr_t priv(int c, int k);
    return addr_t'((((c + 1) * 32 + k) * 16 + 5) * 64);
  endfunction

  int in_cs = 0, sections = 0;
  localparam int NLOC = 40, NREM = 4, NPRIV = 3;
  localparam int REM_CU[3] = '{1, 17, 42};

  task automatic enter_cs(int c);
    in_cs++;
    check(in_cs == 1, $sformatf("mutual exclusion at entry by CU%0d", c));
  endtask

  task automatic body(int c, int iter);
    word_t v;
    cu_op(c, OP_LD, AMO_LD, SCOPE_WG, SEM_NONE, 0, D, 0, 0, v);
    check(v == word_t'(sections), $sformatf("CU%0d sees counter %0d, expected %0d", c, v, sections));
    cu_op(c, OP_ST, AMO_ST, SCOPE_WG, SEM_NONE, 0, D, v + 1, 0, v);
    sections++;
    for (int k = 0; k < NPRIV; k++)
      cu_op(c, OP_ST, AMO_ST, SCOPE_WG, SEM_NONE, 0, priv(c, (iter * NPRIV + k) % 20),
            word_t'(iter * 100 + k), 0, v);
  endtask

  task automatic local_cs(int c, int iter);
    word_t r;
    do cu_op(c, OP_ATOM, AMO_CAS, SCOPE_WG, SEM_ACQ, 0, L, 1, 0, r); while (r != 0);
    enter_cs(c);
    body(c, iter);
    in_cs--;
    cu_op(c, OP_ATOM, AMO_ST, SCOPE_WG, SEM_REL, 0, L, 0, 0, r);
  endtask

  task automatic remote_cs(int c, int iter);
    word_t r;
    do begin
      cu_op(c, OP_ATOM, AMO_CAS, SCOPE_CMP, SEM_ACQ, 1, L, 1, 0, r);
      if (r != 0) repeat (50 + $urandom % 100) @(negedge clk);
    end while (r != 0);
    enter_cs(c);
    body(c, iter);
    in_cs--;
    cu_op(c, OP_ATOM, AMO_ST, SCOPE_CMP, SEM_REL, 1, L, 0, 0, r);
  endtask

  task automatic noise(int c);
    word_t r;
    // 18 blocks of one L1 set: the 17th and 18th evict dirty blocks
    for (int k = 0; k < 18; k++)
      cu_op(c, OP_ST, AMO_ST, SCOPE_WG, SEM_NONE, 0,
            addr_t'((((c % 16) * 32 + k) * 16 + 7) * 64), word_t'(k), 0, r);
    for (int i = 0; i < 30; i++) begin
      addr_t a;
      a = addr_t'(19'h40000 + c * 4096 + ($urandom % 64) * 64);
      cu_op(c, OP_ST, AMO_ST, SCOPE_WG, SEM_NONE, 0, a, word_t'(i), 0, r);
      cu_op(c, OP_LD, AMO_LD, SCOPE_WG, SEM_NONE, 0, a, 0, 0, r);
      check(r == word_t'(i), "private store/load");
      if (i % 10 == 9) cu_op(c, OP_ATOM, AMO_ADD, SCOPE_CMP, SEM_REL, 0, X, 1, 0, r);
    end
  endtask

  word_t r;
  int unsigned t0;
  initial begin
    for (int c = 0; c < N; c++) begin cu_req_valid[c] = 1'b0; cu_req[c] = '0; end
    for (int l = 0; l < 8192; l++) for (int w = 0; w < LINE_WORDS; w++) dut.u_l2.mem[l][w] = '0;
    dut.u_l2.mem[L[ADDR_W-1 -: LINE_AW]][L[5:2]] = 32'd1;     // lock held at start
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---------------- phase 1: the example of the protocol description
    cu_op(0, OP_ST, AMO_ST, SCOPE_WG, SEM_NONE, 0, Y, 1, 0, r);               // ST Y,1
    cu_op(0, OP_ATOM, AMO_ST, SCOPE_WG, SEM_REL, 0, L, 0, 0, r);              // atomic_ST_rel_wg L,0
    check(l2w(Y) == 0 && l2w(L) == 1, "local release stays in L1_0");
    check(dut.g_cu[0].u_l1.u_lr_tbl.valid_q[0], "L recorded in L1_0 LR-TBL");
    t0 = $time;
    cu_op(1, OP_ATOM, AMO_CAS, SCOPE_CMP, SEM_ACQ, 1, L, 1, 0, r);            // rm_acq CAS L,0->1
    check(r == 0, "remote acquire gets the lock");
    check(l2w(Y) == 1 && l2w(L) == 1, "selective flush of L1_0 brought Y to L2, CAS set L");
    check(total(n_sf_hit) == 1 && n_sf_hit[0] == 1, "only L1_0 had to flush");
    check(total(n_sf_prb) == N - 1, "selective flush reached the other 63 L1s");
    $display("remote acquire took %0d cycles", ($time - t0) / 10);
    cu_op(1, OP_LD, AMO_LD, SCOPE_WG, SEM_NONE, 0, Y, 0, 0, r);
    check(r == 1, "remote sharer reads Y = 1");
    cu_op(1, OP_ST, AMO_ST, SCOPE_WG, SEM_NONE, 0, Y, 2, 0, r);               // Y <- 2
    cu_op(1, OP_ATOM, AMO_ST, SCOPE_CMP, SEM_REL, 1, L, 0, 0, r);             // rm_rel L <- 0
    check(l2w(Y) == 2 && l2w(L) == 0, "remote release flushed Y and stored L at L2");
    check(total(n_si_prb) == N, "selective invalidate reached every L1");
    cu_op(0, OP_ATOM, AMO_CAS, SCOPE_WG, SEM_ACQ, 0, L, 1, 0, r);             // CAS_acq_wg L,0->1
    check(r == 0 && n_promo[0] == 1, "local acquire of CU0 was promoted");
    check(l2w(L) == 1, "promoted CAS done at L2");
    cu_op(0, OP_LD, AMO_LD, SCOPE_WG, SEM_NONE, 0, Y, 0, 0, r);
    check(r == 2, "local sharer sees the remote update Y = 2");
    cu_op(0, OP_ATOM, AMO_ST, SCOPE_WG, SEM_REL, 0, L, 0, 0, r);
    cu_op(0, OP_ATOM, AMO_CAS, SCOPE_WG, SEM_ACQ, 0, L, 1, 0, r);
    check(r == 0 && n_promo[0] == 1, "next local acquire stays local");
    // remote acquire by the local sharer's own CU needs no promotion
    begin
      int n_before;
      n_before = total(n_sf_prb);
      cu_op(0, OP_ATOM, AMO_ST, SCOPE_WG, SEM_REL, 0, L, 0, 0, r);
      cu_op(0, OP_ATOM, AMO_CAS, SCOPE_CMP, SEM_ACQ, 1, L, 1, 0, r);
      if (total(n_sf_prb) == n_before && r == 0) n_shortcut++;
      cu_op(0, OP_ATOM, AMO_ST, SCOPE_WG, SEM_REL, 0, L, 0, 0, r);
    end
    // L holds 0 in L1_0 only; the counter D starts at 0
    sections = 0;

    // ---------------- phase 2: lock stress
    fork
      begin
        for (int i = 0; i < NLOC; i++) begin
          local_cs(0, i);
          repeat ($urandom % 8) @(negedge clk);
        end
      end
      begin
        for (int i = 0; i < NREM; i++) begin
          repeat (200 + $urandom % 400) @(negedge clk);
          remote_cs(REM_CU[0], i);
        end
      end
      begin
        for (int i = 0; i < NREM; i++) begin
          repeat (300 + $urandom % 400) @(negedge clk);
          remote_cs(REM_CU[1], i);
        end
      end
      begin
        for (int i = 0; i < NREM; i++) begin
          repeat (250 + $urandom % 400) @(negedge clk);
          remote_cs(REM_CU[2], i);
        end
      end
      noise(8);
      noise(9);
      noise(30);
      noise(63);
    join

    // final read by a CU that took no part: a remote acquire makes D visible
    cu_op(5, OP_ATOM, AMO_CAS, SCOPE_CMP, SEM_ACQ, 1, L, 1, 0, r);
    check(r == 0, "lock free at the end");
    cu_op(5, OP_LD, AMO_LD, SCOPE_WG, SEM_NONE, 0, D, 0, 0, r);
    check(r == word_t'(NLOC + 3 * NREM), $sformatf("final counter %0d", r));
    check(sections == NLOC + 3 * NREM, "all sections ran");
    cu_op(5, OP_ATOM, AMO_ST, SCOPE_CMP, SEM_REL, 1, L, 0, 0, r);
    check(l2w(X) == 12, "device-scope atomic adds from four CUs");
    // CU0's private blocks: a device-scope release writes them back
    cu_op(0, OP_ATOM, AMO_LD, SCOPE_CMP, SEM_REL, 0, X, 0, 0, r);
    begin
      int it, k;
      it = NLOC - 1;
      for (k = 0; k < NPRIV; k++)
        check(l2w(priv(0, (it * NPRIV + k) % 20)) == word_t'(it * 100 + k), "private block at L2");
    end

    // ---------------- mechanisms
    $display("LR-TBL records %0d, selective-flush probes %0d (hits %0d), selective invalidates %0d",
             total(n_lr_upd), total(n_sf_prb), total(n_sf_hit), total(n_si_prb));
    $display("invalidations %0d, promoted acquires %0d, kept promotions %0d, sFIFO overflows %0d",
             total(n_inval), total(n_promo), total(n_keep), total(n_ovf));
    $display("evictions %0d, L2 lock stall cycles %0d, same-CU remote acquires %0d",
             total(n_evict), n_lock_stall, n_shortcut);
    check(total(n_lr_upd) > 0, "mechanism: local release recorded in LR-TBL");
    check(total(n_sf_hit) > 0, "mechanism: selective flush by the local sharer");
    check(total(n_sf_prb) > total(n_sf_hit), "mechanism: selective flush probe miss");
    check(total(n_si_prb) > 0, "mechanism: selective invalidation");
    check(total(n_promo) > 0, "mechanism: promoted local acquire");
    check(total(n_inval) > total(n_promo), "mechanism: device-scope invalidation");
    check(total(n_keep) > 0, "mechanism: failed promoted acquire keeps PA-TBL entry");
    check(total(n_ovf) > 0, "mechanism: sFIFO overflow write-back");
    check(total(n_evict) > 0, "mechanism: eviction write-back");
    check(n_lock_stall > 0, "mechanism: L2 block lock stall");
    check(n_shortcut > 0, "mechanism: remote acquire with local sharer on the same CU");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
