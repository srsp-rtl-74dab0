// tb_pa_tbl: self-checking test of the Promoted Acquire Table.
// Checks insert and lookup, that a repeated insert uses no second entry,
// overflow (every lookup hits) and clearing.
module tb_pa_tbl;
  import srsp_pkg::*;
  localparam int unsigned ENTRIES = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  line_addr_t lk_line = '0, ins_line = '0;
  logic lk_hit, overflow, ins = 1'b0, clear = 1'b0;
  int checks = 0, failures = 0;

  pa_tbl #(.ENTRIES(ENTRIES)) dut (.*);
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

  task automatic do_ins(line_addr_t l);
    @(negedge clk); ins = 1'b1; ins_line = l; @(negedge clk); ins = 1'b0;
  endtask

  task automatic expect_hit(line_addr_t l, bit hit, string what);
    lk_line = l; #1; check(lk_hit == hit, what);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    expect_hit(13'h20, 0, "empty");
    do_ins(13'h20);
    expect_hit(13'h20, 1, "inserted");
    expect_hit(13'h21, 0, "other");
    do_ins(13'h20);                            // duplicate
    for (int i = 1; i < ENTRIES; i++) do_ins(line_addr_t'(13'h40 + i));
    check(!overflow, "duplicate used no entry");
    for (int i = 1; i < ENTRIES; i++) expect_hit(line_addr_t'(13'h40 + i), 1, "fill");
    expect_hit(13'h7ff, 0, "miss when full");
    do_ins(13'h7fe);
    check(overflow, "overflow");
    expect_hit(13'h7ff, 1, "overflow makes every lookup hit");
    @(negedge clk); clear = 1'b1; @(negedge clk); clear = 1'b0;
    check(!overflow, "overflow cleared");
    expect_hit(13'h20, 0, "cleared");
    expect_hit(13'h41, 0, "cleared 2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
