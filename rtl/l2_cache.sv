// l2_cache: shared L2 of the sRSP memory system, the device-scope
// synchronisation point.
//
// One request from the L1 caches is served at a time, chosen round-robin:
//  * L2_RD returns the whole 64 B block;
//  * L2_ATOM performs the atomic read-modify-write on one word and returns
//    the old value;
//  * L2_SELFLUSH (remote acquire) locks the block, forwards a selective-flush
//    probe to every other L1 and answers once all have acked;
//  * L2_SELINV (remote release) forwards a selective-invalidate probe to
//    every L1 and answers once all have acked.
// While a block is locked, reads, atomics and selective flushes of that block
// from other L1s are held back (others are still served); the lock is
// released by the locking L1's atomic to the block, which completes its
// remote acquire. The atomic of a remote release (hold set) locks its block
// in the same way until that L1's selective invalidation has been acked by
// every L1, so no L1 can read the released value before the address is in
// its PA-TBL. Write-backs have their own channel and are accepted (one
// per cycle, round-robin) in every state except the cycle of an array
// update, so an L1 can drain its sFIFO while the L2 waits for probe acks.
//
// Reads and atomics answer LAT (24) cycles after they are accepted; probes
// and their responses add no latency of their own. Response data is broadcast
// and resp_valid[i] selects the receiving L1 for one cycle. Probes are
// levels held per L1 until it pulses prb_ack[i].
// The L2's role, the probe broadcast and the lock during a remote acquire
// follow the paper; the lock during a remote release is this design's.
// This design's own choices: the L2 is modelled as the full 512 kB address
// space (no tags, no misses to DRAM, no L2 sFIFO since no system-scope
// operation is built), serialised request handling, and the message formats.
module l2_cache
  import srsp_pkg::*;
#(
  parameter int unsigned N_CU      = 64,
  parameter int unsigned MEM_BYTES = 524288,
  parameter int unsigned LAT       = 24
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req_valid [N_CU],
  output logic       req_ready [N_CU],
  input  l2_req_t    req       [N_CU],
  output logic       resp_valid[N_CU],
  output l2_resp_t   resp,
  input  logic       wb_valid  [N_CU],
  output logic       wb_ready  [N_CU],
  input  wb_t        wb        [N_CU],
  output logic       prb_valid [N_CU],
  output prb_kind_e  prb_kind,
  output line_addr_t prb_line,
  input  logic       prb_ack   [N_CU]
);

  localparam int unsigned LINES  = MEM_BYTES / LINE_BYTES;
  localparam int unsigned IDX_W  = $clog2(LINES);
  localparam int unsigned ID_W   = (N_CU > 1) ? $clog2(N_CU) : 1;
  localparam int unsigned CNT_W  = $clog2(LAT + 1);

  typedef logic [ID_W-1:0] id_t;
  typedef enum logic [2:0] {M_IDLE, M_LAT, M_DO, M_PROBE, M_DONE} mstate_e;

  word_t mem [LINES][LINE_WORDS];

  mstate_e          st_q;
  l2_req_t          cur_q;
  id_t              cur_id_q, rr_q, wb_rr_q;
  logic [CNT_W-1:0] cnt_q;
  logic [N_CU-1:0]  prb_pend_q;
  logic             lock_valid_q;
  line_addr_t       lock_line_q;
  id_t              lock_owner_q;

  function automatic logic [IDX_W-1:0] idx_of(line_addr_t la);
    return IDX_W'(la);
  endfunction

  // ---------------------------------------------------------------- arbitration
  logic [N_CU-1:0] eligible, blocked;
  logic            gnt_any, wb_any;
  id_t             gnt_id, wb_id;

  always_comb begin
    for (int unsigned i = 0; i < N_CU; i++) begin
      blocked[i]  = req_valid[i] && lock_valid_q && req[i].line == lock_line_q &&
                    id_t'(i) != lock_owner_q && req[i].kind != L2_SELINV;
      eligible[i] = req_valid[i] && !blocked[i];
    end
    gnt_any = 1'b0; gnt_id = '0;
    wb_any  = 1'b0; wb_id  = '0;
    // round-robin: first requester at or after the pointer
    for (int unsigned k = 0; k < N_CU; k++) begin
      int unsigned i;
      i = (int'(rr_q) + k) % N_CU;
      if (!gnt_any && eligible[i]) begin
        gnt_any = 1'b1; gnt_id = id_t'(i);
      end
      i = (int'(wb_rr_q) + k) % N_CU;
      if (!wb_any && wb_valid[i]) begin
        wb_any = 1'b1; wb_id = id_t'(i);
      end
    end
  end

  logic accept, wb_take;
  assign accept  = (st_q == M_IDLE) && gnt_any;
  assign wb_take = (st_q != M_DO) && wb_any;

  always_comb begin
    for (int unsigned i = 0; i < N_CU; i++) begin
      req_ready[i]  = accept && gnt_id == id_t'(i);
      wb_ready[i]   = wb_take && wb_id == id_t'(i);
      resp_valid[i] = (st_q == M_DO || st_q == M_DONE) && cur_id_q == id_t'(i);
      prb_valid[i]  = (st_q == M_PROBE) && prb_pend_q[i];
    end
  end

  // ---------------------------------------------------------------- datapath
  word_t old_word, new_word;
  assign old_word = mem[idx_of(cur_q.line)][cur_q.woff];
  assign new_word = amo_apply(cur_q.amo, old_word, cur_q.wdata, cur_q.cmp);

  always_comb begin
    for (int unsigned i = 0; i < LINE_WORDS; i++) resp.data[i] = mem[idx_of(cur_q.line)][i];
    resp.rdata = old_word;
  end
  assign prb_kind = (cur_q.kind == L2_SELFLUSH) ? PRB_SELFLUSH : PRB_SELINV;
  assign prb_line = cur_q.line;

  // block array: one word-masked write per cycle (write-back or atomic)
  always_ff @(posedge clk) begin
    if (st_q == M_DO && cur_q.kind == L2_ATOM) begin
      mem[idx_of(cur_q.line)][cur_q.woff] <= new_word;
    end else if (wb_take) begin
      for (int unsigned i = 0; i < LINE_WORDS; i++)
        if (wb[wb_id].mask[i]) mem[idx_of(wb[wb_id].line)][i] <= wb[wb_id].data[i];
    end
  end

  // ---------------------------------------------------------------- control
  logic [N_CU-1:0] ack_vec;
  always_comb
    for (int unsigned i = 0; i < N_CU; i++) ack_vec[i] = prb_ack[i];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= M_IDLE; cur_q <= '0; cur_id_q <= '0; rr_q <= '0; wb_rr_q <= '0;
      cnt_q <= '0; prb_pend_q <= '0;
      lock_valid_q <= 1'b0; lock_line_q <= '0; lock_owner_q <= '0;
    end else begin
      if (wb_take) wb_rr_q <= (wb_id == id_t'(N_CU - 1)) ? '0 : wb_id + 1'b1;
      unique case (st_q)
        M_IDLE: begin
          if (accept) begin
            cur_q    <= req[gnt_id];
            cur_id_q <= gnt_id;
            rr_q     <= (gnt_id == id_t'(N_CU - 1)) ? '0 : gnt_id + 1'b1;
            cnt_q    <= '0;
            unique case (req[gnt_id].kind)
              L2_RD, L2_ATOM: st_q <= M_LAT;
              L2_SELFLUSH: begin
                lock_valid_q <= 1'b1;
                lock_line_q  <= req[gnt_id].line;
                lock_owner_q <= gnt_id;
                for (int unsigned i = 0; i < N_CU; i++) prb_pend_q[i] <= (id_t'(i) != gnt_id);
                st_q <= M_PROBE;
              end
              default: begin   // L2_SELINV goes to every L1
                prb_pend_q <= '1;
                st_q       <= M_PROBE;
              end
            endcase
          end
        end
        M_LAT: begin
          if (cnt_q >= CNT_W'(LAT - 2)) st_q <= M_DO;
          else cnt_q <= cnt_q + 1'b1;
        end
        M_DO: begin
          if (cur_q.kind == L2_ATOM && cur_q.hold) begin
            // remote release: block stays locked until its invalidation is done
            lock_valid_q <= 1'b1;
            lock_line_q  <= cur_q.line;
            lock_owner_q <= cur_id_q;
          end else if (cur_q.kind == L2_ATOM && lock_valid_q && cur_id_q == lock_owner_q &&
                       cur_q.line == lock_line_q) begin
            lock_valid_q <= 1'b0;
          end
          st_q <= M_IDLE;
        end
        M_PROBE: begin
          prb_pend_q <= prb_pend_q & ~ack_vec;
          if ((prb_pend_q & ~ack_vec) == '0) begin
            if (cur_q.kind == L2_SELINV && lock_valid_q && cur_id_q == lock_owner_q &&
                cur_q.line == lock_line_q)
              lock_valid_q <= 1'b0;
            st_q <= M_DONE;
          end
        end
        M_DONE: st_q <= M_IDLE;
        default: st_q <= M_IDLE;
      endcase
    end
  end

  // An L1 only acks a probe it was sent.
  for (genvar g = 0; g < N_CU; g++) begin : g_ack_chk
    assert property (@(posedge clk) disable iff (!rst_n) prb_ack[g] |-> prb_valid[g])
      else $error("l2_cache: unsolicited probe ack from L1 %0d", g);
  end

endmodule
