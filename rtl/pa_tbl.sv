// pa_tbl: Promoted Acquire Table of an sRSP L1 cache.
//
// Holds the block addresses whose next local-scope (work-group) acquire must
// be promoted to device scope: an acquire whose address hits here
// invalidates the L1 and performs its atomic at the L2; one that misses
// stays local. Addresses are inserted when this cache finishes a selective
// flush (remote acquire by another CU) or receives a selective invalidation
// (remote release by another CU). The whole table is cleared whenever the
// cache is invalidated.
//
// Lookup is combinational; insert and clear take effect at the next edge.
// Inserting an address already present does nothing. If a new address finds
// the table full, `overflow` is set and reported as a hit for every lookup
// until the next clear, so no promotion is ever lost (every acquire is then
// promoted). The table's role follows the paper; its size (8 entries) and
// the overflow rule are this design's.
module pa_tbl
  import srsp_pkg::*;
#(
  parameter int unsigned ENTRIES = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  line_addr_t lk_line,
  output logic       lk_hit,
  input  logic       ins,
  input  line_addr_t ins_line,
  input  logic       clear,
  output logic       overflow
);

  logic       valid_q [ENTRIES];
  line_addr_t line_q  [ENTRIES];
  logic       ovf_q;

  logic        present, any_free;
  int unsigned free_sel;

  always_comb begin
    lk_hit = ovf_q; present = 1'b0; any_free = 1'b0; free_sel = 0;
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && line_q[i] == lk_line)  lk_hit  = 1'b1;
      if (valid_q[i] && line_q[i] == ins_line) present = 1'b1;
    end
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (!valid_q[i]) begin
        any_free = 1'b1; free_sel = unsigned'(i);
      end
    end
  end

  assign overflow = ovf_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < ENTRIES; i++) begin
        valid_q[i] <= 1'b0;
        line_q[i]  <= '0;
      end
      ovf_q <= 1'b0;
    end else if (clear) begin
      for (int unsigned i = 0; i < ENTRIES; i++) valid_q[i] <= 1'b0;
      ovf_q <= 1'b0;
    end else if (ins && !present) begin
      if (any_free) begin
        valid_q[free_sel] <= 1'b1;
        line_q[free_sel]  <= ins_line;
      end else begin
        ovf_q <= 1'b1;
      end
    end
  end

endmodule
