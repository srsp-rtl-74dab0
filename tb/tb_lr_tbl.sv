// tb_lr_tbl: self-checking test of the Local Release Table.
// Checks insert, update of the sFIFO pointer for a repeated address, the
// pending bit being cleared only by a pop of the recorded slot, overflow when
// a ninth address arrives, and clearing.
module tb_lr_tbl;
  import srsp_pkg::*;
  localparam int unsigned ENTRIES = 8, PTR_W = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  line_addr_t lk_line = '0, upd_line = '0;
  logic lk_hit, lk_pending, overflow;
  logic [PTR_W-1:0] lk_ptr, upd_ptr = '0, pop_ptr = '0;
  logic upd = 1'b0, pop = 1'b0, clear = 1'b0;
  int checks = 0, failures = 0;

  lr_tbl #(.ENTRIES(ENTRIES), .PTR_W(PTR_W)) dut (.*);
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

  task automatic do_upd(line_addr_t l, logic [PTR_W-1:0] p);
    @(negedge clk);
    upd = 1'b1; upd_line = l; upd_ptr = p;
    @(negedge clk); upd = 1'b0;
  endtask

  task automatic expect_lk(line_addr_t l, bit hit, logic [PTR_W-1:0] p, bit pend, string what);
    lk_line = l; #1;
    check(lk_hit == hit, {what, " hit"});
    if (hit) begin
      check(lk_ptr == p, {what, " ptr"});
      check(lk_pending == pend, {what, " pending"});
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    expect_lk(13'h10, 0, 0, 0, "empty");
    do_upd(13'h10, 4'd3);
    expect_lk(13'h10, 1, 4'd3, 1, "insert L");
    expect_lk(13'h11, 0, 0, 0, "other addr");
    do_upd(13'h10, 4'd7);                     // second release to L
    expect_lk(13'h10, 1, 4'd7, 1, "update L");
    @(negedge clk); pop = 1'b1; pop_ptr = 4'd3; @(negedge clk); pop = 1'b0;
    expect_lk(13'h10, 1, 4'd7, 1, "pop of old slot ignored");
    @(negedge clk); pop = 1'b1; pop_ptr = 4'd7; @(negedge clk); pop = 1'b0;
    expect_lk(13'h10, 1, 4'd7, 0, "pop of recorded slot");
    for (int i = 1; i < ENTRIES; i++) do_upd(line_addr_t'(13'h100 + i), PTR_W'(i));
    for (int i = 1; i < ENTRIES; i++)
      expect_lk(line_addr_t'(13'h100 + i), 1, PTR_W'(i), 1, "fill");
    check(!overflow, "no overflow when exactly full");
    do_upd(13'h1ff, 4'd9);
    check(overflow, "overflow on ninth address");
    expect_lk(13'h1ff, 0, 0, 0, "ninth address not stored");
    do_upd(13'h101, 4'd12);                   // update still works when full
    expect_lk(13'h101, 1, 4'd12, 1, "update when full");
    @(negedge clk); clear = 1'b1; @(negedge clk); clear = 1'b0;
    check(!overflow, "overflow cleared");
    expect_lk(13'h10, 0, 0, 0, "cleared L");
    expect_lk(13'h101, 0, 0, 0, "cleared entry");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
