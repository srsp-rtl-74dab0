// tb_sfifo: self-checking test of the sFIFO.
// Pushes and pops at random against a queue model and checks order, the
// slot index returned by each push (the LR-TBL pointer), head index, full,
// empty and count, at the evaluated L1 depth of 16.
module tb_sfifo;
  import srsp_pkg::*;
  localparam int unsigned DEPTH = 16;
  localparam int unsigned IDX_W = $clog2(DEPTH);

  logic clk = 1'b0, rst_n = 1'b0;
  logic push = 1'b0, pop = 1'b0;
  line_addr_t push_line = '0, head_line;
  logic [IDX_W-1:0] push_idx, head_idx;
  logic empty, full;
  logic [IDX_W:0] count;
  int checks = 0, failures = 0;

  sfifo #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  line_addr_t       q_line[$];
  logic [IDX_W-1:0] q_idx[$];
  int unsigned      model_tail = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(empty && !full && count == 0, "empty after reset");
    // fill completely: indices must be 0..DEPTH-1
    for (int i = 0; i < DEPTH; i++) begin
      push = 1'b1; push_line = line_addr_t'(100 + i);
      check(push_idx == IDX_W'(i), $sformatf("push index %0d", i));
      q_line.push_back(push_line); q_idx.push_back(push_idx);
      @(negedge clk);
    end
    model_tail = 0;
    push = 1'b0;
    check(full && count == (IDX_W+1)'(DEPTH), "full after DEPTH pushes");
    // random traffic
    for (int n = 0; n < 3000; n++) begin
      bit dp, dq;
      dp = ($urandom % 2) == 0;
      dq = ($urandom % 2) == 0;
      if (q_line.size() == 0) dq = 1'b0;
      if (q_line.size() == DEPTH && !dq) dp = 1'b0;
      push = dp; pop = dq; push_line = line_addr_t'($urandom);
      if (dq) begin
        check(head_line == q_line[0], "head line order");
        check(head_idx == q_idx[0], "head index");
        void'(q_line.pop_front()); void'(q_idx.pop_front());
      end
      if (dp) begin
        check(push_idx == IDX_W'(model_tail), "push index sequence");
        q_line.push_back(push_line); q_idx.push_back(push_idx);
      end
      if (dp) model_tail = (model_tail + 1) % DEPTH;
      @(negedge clk);
      check(count == (IDX_W+1)'(q_line.size()), "count");
      check(empty == (q_line.size() == 0), "empty flag");
      check(full == (q_line.size() == DEPTH), "full flag");
    end
    push = 1'b0; pop = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
