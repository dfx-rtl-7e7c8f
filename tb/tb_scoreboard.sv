// tb_scoreboard: read-after-write, write-after-write and write-after-read hazards on vector
// ranges and scalar registers, release on unit completion, and a random test against a model
// of the stale bits.
`timescale 1ns/1ps
module tb_scoreboard;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [2:0] src_en; logic [2:0][15:0] src_base, src_len;
  logic [1:0] dst_en; logic [15:0] dst_base, dst_len, sdst;
  logic hazard, issue; logic [1:0] issue_unit; logic [3:0] unit_done;
  scoreboard dut (.*);
  initial begin : watchdog
    #1_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  task automatic idle();
    src_en = '0; dst_en = '0; src_base = '0; src_len = '0; dst_base = '0; dst_len = '0;
    sdst = '0; issue = 0; issue_unit = 0; unit_done = '0;
  endtask
  task automatic expect_h(bit h, string m);
    #1; checks++;
    if (hazard !== h) begin failures++; $display("FAIL: %s (hazard=%0b)", m, hazard); end
  endtask
  // model
  bit vst [512]; bit sst [64];
  initial begin
    idle();
    repeat (2) @(negedge clk); rst_n = 1;
    // unit 0 writes v10..13 and scalar 5, reads v40..41
    @(negedge clk);
    dst_en = 2'b11; dst_base = 10; dst_len = 4; sdst = 5; src_en = 3'b001; src_base[0] = 40;
    src_len[0] = 2;
    expect_h(0, "first issue");
    issue = 1; issue_unit = 0;
    @(negedge clk); idle();
    src_en = 3'b001; src_base[0] = 12; src_len[0] = 3; expect_h(1, "RAW vector");
    src_base[0] = 14; expect_h(0, "no overlap");
    src_en = 3'b100; src_base[2] = 5; expect_h(1, "RAW scalar");
    src_base[2] = 6; expect_h(0, "other scalar");
    src_en = '0; dst_en = 2'b01; dst_base = 8; dst_len = 3; expect_h(1, "WAW vector");
    dst_base = 41; dst_len = 1; expect_h(1, "WAR vector");
    dst_base = 42; expect_h(0, "past read range");
    dst_en = 2'b10; sdst = 5; expect_h(1, "WAW scalar");
    // unit 1 runs too; finishing unit 0 releases only its ranges
    @(negedge clk); idle();
    dst_en = 2'b01; dst_base = 100; dst_len = 2; issue = 1; issue_unit = 1;
    @(negedge clk); idle();
    unit_done = 4'b0001;
    @(negedge clk); idle();
    src_en = 3'b001; src_base[0] = 10; src_len[0] = 4; expect_h(0, "released by done");
    src_base[0] = 101; src_len[0] = 1; expect_h(1, "unit 1 still running");
    dst_en = 2'b01; dst_base = 40; dst_len = 2; src_en = 0; expect_h(0, "read lock released");
    @(negedge clk); idle(); unit_done = 4'b0010;
    @(negedge clk); idle();
    // random: one unit at a time, model of stale bits
    for (int k = 0; k < 200; k++) begin
      int b, l, qb, ql; bit exp;
      b = $urandom % 500; l = 1 + $urandom % 8; qb = $urandom % 500; ql = 1 + $urandom % 8;
      dst_en = 2'b01; dst_base = 16'(b); dst_len = 16'(l);
      #1; issue = !hazard; issue_unit = 2;
      @(negedge clk); idle();
      src_en = 3'b001; src_base[0] = 16'(qb); src_len[0] = 16'(ql);
      exp = 0;
      for (int i = qb; i < qb + ql; i++) if (i >= b && i < b + l) exp = 1;
      expect_h(exp, "random RAW");
      @(negedge clk); idle(); unit_done = 4'b0100;
      @(negedge clk); idle();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
