// sfifo: synchronisation FIFO that records the block address of every write
// to a write-combining cache, oldest first.
//
// A cache flush pops every entry in order and writes the block back; when the
// FIFO is full the oldest entry is popped (and written back) before a new one
// can be pushed. For sRSP each push also returns the index of the slot it
// used: a local release stores that index in the LR-TBL, and a selective
// flush pops entries until the popped index equals it. Duplicate addresses
// are allowed; the cache skips blocks that are already clean.
//
// Interface: push/push_line write the tail (push_idx is the slot written this
// cycle); pop removes the head (head_line, head_idx). Push and pop may happen
// in the same cycle unless the FIFO is empty. Depth 16 (L1) and 24 (L2) are
// the evaluated sizes; the index interface is this design's choice of how the
// "pointer into the sFIFO" of the LR-TBL is represented.
module sfifo
  import srsp_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  localparam int unsigned IDX_W = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  line_addr_t       push_line,
  output logic [IDX_W-1:0] push_idx,
  input  logic             pop,
  output line_addr_t       head_line,
  output logic [IDX_W-1:0] head_idx,
  output logic             empty,
  output logic             full,
  output logic [IDX_W:0]   count
);

  line_addr_t       mem [DEPTH];
  logic [IDX_W-1:0] head_q, tail_q;
  logic [IDX_W:0]   count_q;

  function automatic logic [IDX_W-1:0] inc(logic [IDX_W-1:0] p);
    return (p == IDX_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign push_idx  = tail_q;
  assign head_idx  = head_q;
  assign head_line = mem[head_q];
  assign empty     = (count_q == 0);
  assign full      = (count_q == (IDX_W + 1)'(DEPTH));
  assign count     = count_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head_q  <= '0;
      tail_q  <= '0;
      count_q <= '0;
    end else begin
      if (push) begin
        mem[tail_q] <= push_line;
        tail_q      <= inc(tail_q);
      end
      if (pop) head_q <= inc(head_q);
      count_q <= count_q + (IDX_W + 1)'(push) - (IDX_W + 1)'(pop);
    end
  end

  // A full FIFO must be popped before (or while) it is pushed.
  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop))
    else $error("sfifo: push into full FIFO");
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty)
    else $error("sfifo: pop from empty FIFO");

endmodule
