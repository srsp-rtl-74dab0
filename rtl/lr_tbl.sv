// lr_tbl: Local Release Table of an sRSP L1 cache.
//
// A small fully associative table (a CAM) with one entry per address that
// received a local-scope (work-group) release. Each entry holds that block
// address and the index of the sFIFO slot that recorded the release's
// atomic write. A later release to the same address updates the index; a new
// address takes a free entry. When the sFIFO pops a slot, the entry that
// points at it is marked no longer pending: the release is already visible
// at the L2, but the entry still identifies this cache as the local sharer.
//
// Lookup is combinational (hit, ptr, pending). upd inserts or updates and
// takes effect at the next edge; clear empties the table (done on every
// cache invalidation). If a new address finds the table full, the entry is
// not stored and `overflow` is set until the next clear; the cache then
// treats every selective-flush probe as a hit and flushes its whole sFIFO.
// The table as a CAM of {address, sFIFO pointer} follows the paper; its
// size (8 entries), the pending bit and the overflow rule are this design's.
module lr_tbl
  import srsp_pkg::*;
#(
  parameter int unsigned ENTRIES = 8,
  parameter int unsigned PTR_W   = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  // lookup
  input  line_addr_t       lk_line,
  output logic             lk_hit,
  output logic [PTR_W-1:0] lk_ptr,
  output logic             lk_pending,
  // insert / update
  input  logic             upd,
  input  line_addr_t       upd_line,
  input  logic [PTR_W-1:0] upd_ptr,
  // sFIFO pop notification
  input  logic             pop,
  input  logic [PTR_W-1:0] pop_ptr,
  // clear all entries
  input  logic             clear,
  output logic             overflow
);

  logic             valid_q   [ENTRIES];
  logic             pending_q [ENTRIES];
  line_addr_t       line_q    [ENTRIES];
  logic [PTR_W-1:0] ptr_q     [ENTRIES];
  logic             ovf_q;

  logic [ENTRIES-1:0] lk_match, upd_match, free;
  logic               upd_hit, any_free;
  int unsigned        upd_sel, free_sel;

  always_comb begin
    lk_hit = 1'b0; lk_ptr = '0; lk_pending = 1'b0;
    upd_hit = 1'b0; upd_sel = 0; any_free = 1'b0; free_sel = 0;
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      lk_match[i]  = valid_q[i] && (line_q[i] == lk_line);
      upd_match[i] = valid_q[i] && (line_q[i] == upd_line);
      free[i]      = !valid_q[i];
    end
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      if (lk_match[i]) begin
        lk_hit = 1'b1; lk_ptr = ptr_q[i]; lk_pending = pending_q[i];
      end
      if (upd_match[i]) begin
        upd_hit = 1'b1; upd_sel = i;
      end
    end
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (free[i]) begin
        any_free = 1'b1; free_sel = unsigned'(i);
      end
    end
  end

  assign overflow = ovf_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < ENTRIES; i++) begin
        valid_q[i]   <= 1'b0;
        pending_q[i] <= 1'b0;
        line_q[i]    <= '0;
        ptr_q[i]     <= '0;
      end
      ovf_q <= 1'b0;
    end else if (clear) begin
      for (int unsigned i = 0; i < ENTRIES; i++) begin
        valid_q[i]   <= 1'b0;
        pending_q[i] <= 1'b0;
      end
      ovf_q <= 1'b0;
    end else begin
      if (pop) begin
        for (int unsigned i = 0; i < ENTRIES; i++)
          if (valid_q[i] && pending_q[i] && ptr_q[i] == pop_ptr) pending_q[i] <= 1'b0;
      end
      if (upd) begin
        if (upd_hit) begin
          ptr_q[upd_sel]     <= upd_ptr;
          pending_q[upd_sel] <= 1'b1;
        end else if (any_free) begin
          valid_q[free_sel]   <= 1'b1;
          line_q[free_sel]    <= upd_line;
          ptr_q[free_sel]     <= upd_ptr;
          pending_q[free_sel] <= 1'b1;
        end else begin
          ovf_q <= 1'b1;
        end
      end
    end
  end

  // At most one entry per address.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(lk_match))
    else $error("lr_tbl: duplicate entries");

endmodule
