// l1_cache: per-compute-unit L1 data cache with sRSP support.
//
// The cache is write-combining: a store allocates its block without fetching
// it and marks only the written word valid and dirty; a load that finds its
// word invalid fetches the block from the L2 and merges it under the dirty
// words. Every write pushes its block address into the sFIFO, so the sFIFO
// always lists every dirty block, oldest first. A flush pops the sFIFO and
// writes back the dirty words of each popped block; an invalidation first
// flushes, then clears every valid bit in one cycle.
//
// Synchronisation (atomics carry a scope, an order and a remote flag):
//  * local release (wg scope): the atomic is done in the L1, its block goes
//    into the sFIFO and the LR-TBL records {address, sFIFO index}.
//  * local acquire (wg scope): if the PA-TBL holds the address the acquire
//    is promoted: flush, invalidate (which also empties LR-TBL and PA-TBL),
//    atomic at the L2. Otherwise the atomic is done in the L1.
//  * device-scope acquire/release: flush (and invalidate for an acquire),
//    then the atomic at the L2.
//  * remote acquire (rm_acq): if this cache's own LR-TBL holds the address the
//    local sharer runs on this CU and the op is done as a local acquire.
//    Otherwise a selective-flush request goes to the L2, which forwards it to
//    the other L1s; while their acks are collected this cache flushes its own
//    sFIFO; then it invalidates and does the atomic at the L2 (which keeps the
//    block locked from the request until this atomic).
//  * remote release (rm_rel): flush, atomic at the L2, then a
//    selective-invalidate request that makes every L1 put the address into
//    its PA-TBL. rm_ar does both.
//  * probes from the L2: selective flush looks the address up in the LR-TBL;
//    on a hit it pops the sFIFO up to and including the recorded entry,
//    writing each dirty block back, then inserts the address into the PA-TBL
//    and acks; on a miss it acks at once. Selective invalidate inserts the
//    address into the PA-TBL and acks.
// The operations above follow the paper. This design's own choices: one CU
// request is served at a time (other requests wait, as the paper requires
// during a remote acquire); probes are served whenever the controller is idle
// or waiting for the L2; round-robin replacement; a device-scope atomic drops
// this cache's copy of its word; table sizes and the table overflow rules.
//
// Interfaces (valid/ready unless noted): CU request in, CU response out as a
// one-cycle pulse. L2 request out, L2 response in as a pulse. Write-backs out
// on their own channel (the L2 always drains it, also during probes). Probes
// in as a level held until this cache pulses prb_ack.
// Timing: a load or store that hits answers HIT_LAT (4) cycles after the
// request is accepted; sFIFO pops take one cycle per clean block and wait for
// the write-back handshake for a dirty one.
module l1_cache
  import srsp_pkg::*;
#(
  parameter int unsigned SIZE_BYTES  = 16384,
  parameter int unsigned WAYS        = 16,
  parameter int unsigned SFIFO_DEPTH = 16,
  parameter int unsigned LR_ENTRIES  = 8,
  parameter int unsigned PA_ENTRIES  = 8,
  parameter int unsigned HIT_LAT     = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  // compute unit
  input  logic       cu_req_valid,
  output logic       cu_req_ready,
  input  cu_req_t    cu_req,
  output logic       cu_resp_valid,
  output word_t      cu_resp_rdata,
  // requests to the L2
  output logic       l2_req_valid,
  input  logic       l2_req_ready,
  output l2_req_t    l2_req,
  input  logic       l2_resp_valid,
  input  l2_resp_t   l2_resp,
  // write-backs to the L2
  output logic       wb_valid,
  input  logic       wb_ready,
  output wb_t        wb,
  // probes from the L2
  input  logic       prb_valid,
  input  prb_kind_e  prb_kind,
  input  line_addr_t prb_line,
  output logic       prb_ack
);

  localparam int unsigned LINES = SIZE_BYTES / LINE_BYTES;
  localparam int unsigned SETS  = LINES / WAYS;
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned PTR_W = $clog2(SFIFO_DEPTH);
  localparam int unsigned CYC_W = 8;

  typedef logic [SET_W-1:0] set_t;
  typedef logic [WAY_W-1:0] way_t;
  typedef enum logic [1:0] {FL_ALL, FL_UNTIL, FL_ONE} flush_mode_e;
  typedef enum logic [4:0] {
    S_IDLE, S_DECODE, S_NEXT, S_LOCAL, S_EVICT, S_ALLOC, S_FILL, S_EXEC,
    S_WAIT_L2, S_ATOM_DONE, S_FLUSH, S_FLUSH_WB, S_PRB, S_PRB_PA, S_PRB_ACK,
    S_RESP
  } state_e;

  // ---------------------------------------------------------------- arrays
  line_addr_t tag_q    [SETS][WAYS];  // whole block address kept as tag
  logic       lvalid_q [SETS][WAYS];
  wmask_t     wvalid_q [SETS][WAYS];
  wmask_t     dirty_q  [SETS][WAYS];
  word_t      data_q   [SETS][WAYS][LINE_WORDS];
  way_t       rr_q     [SETS];

  function automatic set_t set_of(line_addr_t la);
    return (SETS > 1) ? set_t'(la) : '0;   // low block-address bits
  endfunction

  // ---------------------------------------------------------------- state
  state_e      state_q, prb_ret_q, wait_ret_q, flush_ret_q;
  cu_req_t     req_q;
  word_t       res_q;
  logic [CYC_W-1:0] cyc_q;
  logic        f_selflush_q, f_flush_q, f_wait_q, f_inval_q, f_at_l2_q,
               f_local_q, f_selinv_q, f_lr_upd_q, f_promoted_q;
  flush_mode_e flush_mode_q;
  logic [PTR_W-1:0] flush_target_q;
  logic        l2_req_valid_q;
  l2_req_t     l2_req_q;
  logic        l2_resp_got_q;
  l2_resp_t    l2_resp_q;
  logic        wb_valid_q;
  wb_t         wb_q;
  set_t        op_set_q, fl_set_q;   // block of the current access / of a flush write-back
  way_t        op_way_q, fl_way_q;

  line_addr_t req_line;
  woff_t      req_woff;
  set_t       req_set;
  assign req_line = req_q.addr[ADDR_W-1 -: LINE_AW];
  assign req_woff = req_q.addr[$clog2(LINE_BYTES)-1 -: WOFF_W];
  assign req_set  = set_of(req_line);

  // ---------------------------------------------------------------- lookups
  logic req_hit;   way_t req_way;
  logic fl_hit;    way_t fl_way;
  logic vic_free;  way_t vic_free_way;

  // sFIFO / tables
  logic             sf_push, sf_pop, sf_empty, sf_full;
  line_addr_t       sf_push_line, sf_head_line;
  logic [PTR_W-1:0] sf_push_idx, sf_head_idx;
  logic [PTR_W:0]   sf_count;
  set_t             fl_set;

  line_addr_t       lr_lk_line;
  logic             lr_hit, lr_pending, lr_ovf, lr_upd, tbl_clear;
  logic [PTR_W-1:0] lr_ptr;
  logic             pa_hit, pa_ins, pa_ovf;
  line_addr_t       pa_ins_line;

  assign fl_set = set_of(sf_head_line);

  always_comb begin
    req_hit = 1'b0; req_way = '0; fl_hit = 1'b0; fl_way = '0;
    vic_free = 1'b0; vic_free_way = '0;
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (lvalid_q[req_set][w] && tag_q[req_set][w] == req_line) begin
        req_hit = 1'b1; req_way = way_t'(w);
      end
      if (lvalid_q[fl_set][w] && tag_q[fl_set][w] == sf_head_line) begin
        fl_hit = 1'b1; fl_way = way_t'(w);
      end
    end
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (!lvalid_q[req_set][w]) begin
        vic_free = 1'b1; vic_free_way = way_t'(w);
      end
    end
  end

  sfifo #(.DEPTH(SFIFO_DEPTH)) u_sfifo (
    .clk, .rst_n,
    .push(sf_push), .push_line(sf_push_line), .push_idx(sf_push_idx),
    .pop(sf_pop), .head_line(sf_head_line), .head_idx(sf_head_idx),
    .empty(sf_empty), .full(sf_full), .count(sf_count)
  );

  lr_tbl #(.ENTRIES(LR_ENTRIES), .PTR_W(PTR_W)) u_lr_tbl (
    .clk, .rst_n,
    .lk_line(lr_lk_line), .lk_hit(lr_hit), .lk_ptr(lr_ptr), .lk_pending(lr_pending),
    .upd(lr_upd), .upd_line(req_line), .upd_ptr(sf_push_idx),
    .pop(sf_pop), .pop_ptr(sf_head_idx),
    .clear(tbl_clear), .overflow(lr_ovf)
  );

  pa_tbl #(.ENTRIES(PA_ENTRIES)) u_pa_tbl (
    .clk, .rst_n,
    .lk_line(req_line), .lk_hit(pa_hit),
    .ins(pa_ins), .ins_line(pa_ins_line),
    .clear(tbl_clear), .overflow(pa_ovf)
  );

  assign lr_lk_line = (state_q == S_PRB) ? prb_line : req_line;

  // ---------------------------------------------------------------- decode
  word_t old_word, new_word;
  // A CAS writes (and enters the sFIFO) only when it succeeds.
  logic op_writes;
  assign op_writes = (req_q.op == OP_ST) ||
                     (req_q.op == OP_ATOM && req_q.amo != AMO_LD &&
                      !(req_q.amo == AMO_CAS && old_word != req_q.cmp));

  logic flush_done_now;  // current sFIFO pop ends the flush
  assign flush_done_now = (flush_mode_q == FL_ONE) ||
                          (flush_mode_q == FL_UNTIL && sf_head_idx == flush_target_q);

  assign old_word = data_q[req_set][op_way_q][req_woff];
  assign new_word = (req_q.op == OP_ST) ? req_q.wdata
                                        : amo_apply(req_q.amo, old_word, req_q.wdata, req_q.cmp);

  // ---------------------------------------------------------------- outputs
  assign cu_req_ready  = (state_q == S_IDLE) && !prb_valid;
  assign cu_resp_valid = (state_q == S_RESP) && (cyc_q >= CYC_W'(HIT_LAT - 1));
  assign cu_resp_rdata = res_q;
  assign l2_req_valid  = l2_req_valid_q;
  assign l2_req        = l2_req_q;
  assign wb_valid      = wb_valid_q;
  assign wb            = wb_q;
  assign prb_ack       = (state_q == S_PRB_ACK);

  logic in_exec_push;
  assign in_exec_push = (state_q == S_EXEC) && op_writes && !sf_full;
  assign sf_push      = in_exec_push;
  assign sf_push_line = req_line;
  assign lr_upd       = in_exec_push && f_lr_upd_q;
  assign sf_pop       = ((state_q == S_FLUSH) && !sf_empty && !(fl_hit && dirty_q[fl_set][fl_way] != '0))
                     || ((state_q == S_FLUSH_WB) && wb_ready);
  assign tbl_clear    = (state_q == S_NEXT) && !f_selflush_q && !f_flush_q && !f_wait_q && f_inval_q;
  // A promoted acquire whose CAS failed at the L2 keeps its PA-TBL entry, so
  // the next attempt is promoted again instead of reading a local copy.
  logic keep_promo;
  assign keep_promo   = (state_q == S_ATOM_DONE) && f_promoted_q && req_q.amo == AMO_CAS &&
                        l2_resp_q.rdata != req_q.cmp;
  assign pa_ins       = (state_q == S_PRB && prb_kind == PRB_SELINV) || (state_q == S_PRB_PA) ||
                        keep_promo;
  assign pa_ins_line  = keep_promo ? req_line : prb_line;

  function automatic l2_req_t mk_req(l2_kind_e k, line_addr_t la, woff_t wo, cu_req_t r);
    l2_req_t q;
    q.kind = k; q.line = la; q.woff = wo;
    q.amo = r.amo; q.wdata = r.wdata; q.cmp = r.cmp; q.hold = 1'b0;
    return q;
  endfunction

  // ---------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE; prb_ret_q <= S_IDLE; wait_ret_q <= S_IDLE; flush_ret_q <= S_IDLE;
      req_q <= '0; res_q <= '0; cyc_q <= '0;
      {f_selflush_q, f_flush_q, f_wait_q, f_inval_q, f_at_l2_q, f_local_q, f_selinv_q, f_lr_upd_q} <= '0;
      f_promoted_q <= 1'b0;
      flush_mode_q <= FL_ALL; flush_target_q <= '0;
      l2_req_valid_q <= 1'b0; l2_req_q <= '0; l2_resp_got_q <= 1'b0; l2_resp_q <= '0;
      wb_valid_q <= 1'b0; wb_q <= '0; op_set_q <= '0; op_way_q <= '0;
      fl_set_q <= '0; fl_way_q <= '0;
      for (int unsigned s = 0; s < SETS; s++) begin
        rr_q[s] <= '0;
        for (int unsigned w = 0; w < WAYS; w++) begin
          lvalid_q[s][w] <= 1'b0; wvalid_q[s][w] <= '0; dirty_q[s][w] <= '0; tag_q[s][w] <= '0;
        end
      end
    end else begin
      if (cyc_q != '1) cyc_q <= cyc_q + 1'b1;
      if (l2_req_valid_q && l2_req_ready) l2_req_valid_q <= 1'b0;
      if (l2_resp_valid) begin
        l2_resp_got_q <= 1'b1;
        l2_resp_q     <= l2_resp;
      end

      unique case (state_q)
        S_IDLE: begin
          if (prb_valid) begin
            prb_ret_q <= S_IDLE;
            state_q   <= S_PRB;
          end else if (cu_req_valid) begin
            req_q   <= cu_req;
            cyc_q   <= '0;
            state_q <= S_DECODE;
          end
        end

        S_DECODE: begin
          if (req_q.op != OP_ATOM) begin
            {f_selflush_q, f_flush_q, f_wait_q, f_inval_q, f_at_l2_q, f_selinv_q, f_lr_upd_q} <= '0;
            f_local_q    <= 1'b0;
            f_promoted_q <= 1'b0;
            state_q   <= S_LOCAL;
          end else begin
            logic acq, rel, eff_remote, eff_cmp, inval, at_l2;
            acq        = (req_q.sem == SEM_ACQ) || (req_q.sem == SEM_AR);
            rel        = (req_q.sem == SEM_REL) || (req_q.sem == SEM_AR);
            // rm_* whose local sharer runs on this CU needs no promotion
            eff_remote = req_q.remote && !lr_hit;
            eff_cmp    = (req_q.scope == SCOPE_CMP || req_q.remote) && !(req_q.remote && lr_hit);
            inval      = acq && (eff_cmp || pa_hit);
            at_l2      = eff_cmp || inval;
            f_selflush_q <= eff_remote && acq;
            f_flush_q    <= (eff_cmp && req_q.sem != SEM_NONE) || inval;
            f_wait_q     <= 1'b0;
            f_inval_q    <= inval;
            f_at_l2_q    <= at_l2;
            f_local_q    <= !at_l2;
            f_selinv_q   <= eff_remote && rel;
            f_lr_upd_q   <= !at_l2 && rel;
            f_promoted_q <= inval && !eff_cmp;
            state_q      <= S_NEXT;
          end
        end

        // Dispatcher: performs the remaining steps of an atomic in order.
        S_NEXT: begin
          if (f_selflush_q) begin
            f_selflush_q   <= 1'b0;
            f_wait_q       <= 1'b1;
            l2_req_valid_q <= 1'b1;
            l2_req_q       <= mk_req(L2_SELFLUSH, req_line, req_woff, req_q);
          end else if (f_flush_q) begin
            f_flush_q    <= 1'b0;
            flush_mode_q <= FL_ALL;
            flush_ret_q  <= S_NEXT;
            state_q      <= S_FLUSH;
          end else if (f_wait_q) begin
            f_wait_q   <= 1'b0;
            wait_ret_q <= S_NEXT;
            state_q    <= S_WAIT_L2;
          end else if (f_inval_q) begin
            // single-cycle flash invalidation (every dirty block was flushed)
            f_inval_q <= 1'b0;
            for (int unsigned s = 0; s < SETS; s++)
              for (int unsigned w = 0; w < WAYS; w++) begin
                lvalid_q[s][w] <= 1'b0; wvalid_q[s][w] <= '0; dirty_q[s][w] <= '0;
              end
          end else if (f_at_l2_q) begin
            f_at_l2_q      <= 1'b0;
            l2_req_valid_q <= 1'b1;
            l2_req_q       <= mk_req(L2_ATOM, req_line, req_woff, req_q);
            l2_req_q.hold  <= f_selinv_q;   // remote release: lock until the invalidation
            wait_ret_q     <= S_ATOM_DONE;
            state_q        <= S_WAIT_L2;
          end else if (f_local_q) begin
            f_local_q <= 1'b0;
            state_q   <= S_LOCAL;
          end else if (f_selinv_q) begin
            f_selinv_q     <= 1'b0;
            l2_req_valid_q <= 1'b1;
            l2_req_q       <= mk_req(L2_SELINV, req_line, req_woff, req_q);
            wait_ret_q     <= S_NEXT;
            state_q        <= S_WAIT_L2;
          end else begin
            state_q <= S_RESP;
          end
        end

        // Local access: make the block (and for reads the word) present.
        S_LOCAL: begin
          op_set_q <= req_set;
          if (req_hit) begin
            op_way_q <= req_way;
            if (req_q.op == OP_ST || wvalid_q[req_set][req_way][req_woff]) begin
              state_q <= S_EXEC;
            end else begin
              l2_req_valid_q <= 1'b1;
              l2_req_q       <= mk_req(L2_RD, req_line, req_woff, req_q);
              wait_ret_q     <= S_FILL;
              state_q        <= S_WAIT_L2;
            end
          end else begin
            op_way_q <= vic_free ? vic_free_way : rr_q[req_set];
            state_q  <= S_EVICT;
          end
        end

        S_EVICT: begin
          if (lvalid_q[op_set_q][op_way_q] && dirty_q[op_set_q][op_way_q] != '0) begin
            if (!wb_valid_q) begin
              wb_valid_q <= 1'b1;
              wb_q.line  <= tag_q[op_set_q][op_way_q];
              wb_q.mask  <= dirty_q[op_set_q][op_way_q];
              for (int unsigned i = 0; i < LINE_WORDS; i++)
                wb_q.data[i] <= data_q[op_set_q][op_way_q][i];
            end else if (wb_ready) begin
              wb_valid_q <= 1'b0;
              dirty_q[op_set_q][op_way_q] <= '0;
              state_q <= S_ALLOC;
            end
          end else begin
            state_q <= S_ALLOC;
          end
        end

        S_ALLOC: begin
          lvalid_q[op_set_q][op_way_q] <= 1'b1;
          tag_q[op_set_q][op_way_q]    <= req_line;
          wvalid_q[op_set_q][op_way_q] <= '0;
          dirty_q[op_set_q][op_way_q]  <= '0;
          rr_q[op_set_q]               <= rr_q[op_set_q] + 1'b1;
          state_q                      <= S_LOCAL;
        end

        S_FILL: begin
          // merge the fetched block under the locally dirty words
          if (lvalid_q[op_set_q][op_way_q] && tag_q[op_set_q][op_way_q] == req_line) begin
            for (int unsigned i = 0; i < LINE_WORDS; i++)
              if (!dirty_q[op_set_q][op_way_q][i]) data_q[op_set_q][op_way_q][i] <= l2_resp_q.data[i];
            wvalid_q[op_set_q][op_way_q] <= '1;
          end
          state_q <= S_LOCAL;
        end

        S_EXEC: begin
          if (op_writes && sf_full) begin
            // make room: the oldest sFIFO entry is popped and written back
            flush_mode_q <= FL_ONE;
            flush_ret_q  <= S_EXEC;
            state_q      <= S_FLUSH;
          end else begin
            res_q <= old_word;
            if (op_writes) begin
              data_q[op_set_q][op_way_q][req_woff]   <= new_word;
              wvalid_q[op_set_q][op_way_q][req_woff] <= 1'b1;
              dirty_q[op_set_q][op_way_q][req_woff]  <= 1'b1;
            end
            state_q <= (req_q.op == OP_ATOM) ? S_NEXT : S_RESP;
          end
        end

        S_WAIT_L2: begin
          if (l2_resp_got_q && !l2_req_valid_q) begin
            l2_resp_got_q <= 1'b0;
            state_q       <= wait_ret_q;
          end else if (prb_valid) begin
            prb_ret_q <= S_WAIT_L2;
            state_q   <= S_PRB;
          end
        end

        S_ATOM_DONE: begin
          res_q <= l2_resp_q.rdata;
          if (req_hit) begin
            wvalid_q[req_set][req_way][req_woff] <= 1'b0;
            dirty_q[req_set][req_way][req_woff]  <= 1'b0;
          end
          state_q <= S_NEXT;
        end

        // sFIFO drain engine (FL_ALL / FL_UNTIL index / FL_ONE entry)
        S_FLUSH: begin
          if (sf_empty) begin
            state_q <= flush_ret_q;
          end else if (fl_hit && dirty_q[fl_set][fl_way] != '0) begin
            wb_valid_q <= 1'b1;
            wb_q.line  <= sf_head_line;
            wb_q.mask  <= dirty_q[fl_set][fl_way];
            for (int unsigned i = 0; i < LINE_WORDS; i++)
              wb_q.data[i] <= data_q[fl_set][fl_way][i];
            fl_set_q <= fl_set;
            fl_way_q <= fl_way;
            state_q  <= S_FLUSH_WB;
          end else if (flush_done_now) begin
            state_q <= flush_ret_q;   // clean block popped
          end
        end

        S_FLUSH_WB: begin
          if (wb_ready) begin
            wb_valid_q <= 1'b0;
            dirty_q[fl_set_q][fl_way_q] <= '0;
            state_q <= flush_done_now ? flush_ret_q : S_FLUSH;
          end
        end

        // probe from the L2
        S_PRB: begin
          if (prb_kind == PRB_SELINV) begin
            state_q <= S_PRB_ACK;            // PA-TBL insert this cycle
          end else if (lr_ovf) begin
            flush_mode_q <= FL_ALL;
            flush_ret_q  <= S_PRB_PA;
            state_q      <= S_FLUSH;
          end else if (lr_hit && lr_pending) begin
            flush_mode_q   <= FL_UNTIL;
            flush_target_q <= lr_ptr;
            flush_ret_q    <= S_PRB_PA;
            state_q        <= S_FLUSH;
          end else if (lr_hit) begin
            // the release's entry already left the sFIFO; later writes to
            // the block may not have, so everything is flushed
            flush_mode_q <= FL_ALL;
            flush_ret_q  <= S_PRB_PA;
            state_q      <= S_FLUSH;
          end else begin
            state_q <= S_PRB_ACK;            // not the local sharer
          end
        end

        S_PRB_PA:  state_q <= S_PRB_ACK;
        S_PRB_ACK: state_q <= prb_ret_q;

        S_RESP: begin
          if (cyc_q >= CYC_W'(HIT_LAT - 1)) state_q <= S_IDLE;
        end

        default: state_q <= S_IDLE;
      endcase
    end
  end

  // A request stays stable while it waits for the L2.
  assert property (@(posedge clk) disable iff (!rst_n)
                   l2_req_valid && !l2_req_ready |=> l2_req_valid && $stable(l2_req))
    else $error("l1_cache: L2 request dropped or changed before accepted");
  assert property (@(posedge clk) disable iff (!rst_n)
                   wb_valid && !wb_ready |=> wb_valid && $stable(wb))
    else $error("l1_cache: write-back dropped or changed before accepted");

endmodule
