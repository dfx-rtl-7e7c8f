// tb_matrix_operand_collector: drives matrix instructions with a weight FIFO model (refilled
// with random gaps) and an SFU_M model, and checks the issue pattern: one register read per
// input chunk, four slots in consecutive cycles, the same slot back after exactly 12 cycles
// (the accumulate latency) when weights are present, first/last on the first/last chunk, a
// stall while fewer than four tiles wait, and the output writes to dst.. plus the reduce-max
// scalar and arg-max token.
`timescale 1ns/1ps
module tb_matrix_operand_collector;
  import dfx_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic issue, busy, stall_o, vre, w_pop, mfu_valid, mfu_first, mfu_last;
  instr_t ins; logic [15:0] len, nout; logic [8:0] vraddr, vwaddr; logic [5:0] w_count;
  logic [1:0] mfu_slot; logic sfm_start, sfm_gelu, sfm_scale, sfm_mask; logic [15:0] sfm_groups;
  logic sfm_vec_valid, sfm_red_valid; fp16_t sfm_red_max; logic [15:0] sfm_red_idx;
  logic vwe, swe, tok_valid; logic [5:0] swaddr; fp16_t swdata; logic [15:0] tok;
  matrix_operand_collector dut (.*);
  initial begin : watchdog
    #2_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  task automatic ck(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", m); end
  endtask
  int cyc, n_iss, stalls, last_slot0, gaps_ok, gaps_bad, nread, groups_out;
  bit starve;
  int exp_k, exp_slot, L, NO;
  // weight FIFO model
  always @(posedge clk) begin
    cyc++;
    if (w_pop) begin ck(w_count != 0, "pop of empty FIFO"); w_count <= w_count - 1; end
    if (!w_pop && w_count < 32 && (!starve || $urandom % 6 == 0)) w_count <= w_count + 1;
    if (w_pop && w_count < 32 && (!starve || $urandom % 6 == 0)) w_count <= w_count;
    if (stall_o) stalls++;
    if (vre) begin
      ck(vraddr == 9'(20 + exp_k), $sformatf("read address %0d", vraddr));
      nread++;
    end
    if (mfu_valid) begin
      ck(mfu_slot == 2'(exp_slot), "slot order");
      ck(mfu_first == (exp_k == 0), "first flag");
      ck(mfu_last == (exp_k == L - 1), "last flag");
      if (mfu_slot == 0) begin
        if (last_slot0 >= 0 && exp_k != 0) begin
          if (cyc - last_slot0 == 12) gaps_ok++; else if (!starve) gaps_bad++;
        end
        last_slot0 = cyc;
      end
      exp_slot = (exp_slot + 1) % 4;
      if (exp_slot == 0) exp_k = (exp_k + 1) % L;
      n_iss++;
    end
  end
  initial begin
    issue = 0; ins = '0; len = 0; nout = 0; w_count = 0; sfm_vec_valid = 0; sfm_red_valid = 0;
    sfm_red_max = 16'h4200; sfm_red_idx = 16'd77; cyc = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 2; r++) begin
      starve = (r == 1);
      L = 3 + r; NO = 2;
      n_iss = 0; stalls = 0; last_slot0 = -1; gaps_ok = 0; gaps_bad = 0; nread = 0;
      exp_k = 0; exp_slot = 0;
      @(negedge clk);
      if (starve) w_count <= 0;
      @(negedge clk);
      ins = '0; ins.itype = IT_COMPUTE; ins.op = OP_MM; ins.src1 = 24'd20; ins.dst = 24'd50;
      ins.src2 = 24'd9; ins.flags[F_MAX] = 1; ins.flags[F_ARGMAX] = 1;
      len = 16'(L); nout = 16'(NO); issue = 1;
      @(negedge clk); issue = 0;
      ck(sfm_groups == 16'(NO * 4), "SFU_M group count");
      while (n_iss < L * NO * 4) @(negedge clk);
      ck(busy, "busy until results are written");
      // SFU_M model: NO vectors, then the reduction
      for (int g = 0; g < NO; g++) begin
        sfm_vec_valid = 1; #1;
        ck(vwe && vwaddr == 9'(50 + g), "result write address");
        @(negedge clk); sfm_vec_valid = 0;
      end
      sfm_red_valid = 1; #1;
      ck(swe && swaddr == 6'd9 && swdata == 16'h4200, "reduce-max to scalar register");
      ck(tok_valid && tok == 16'd77, "arg-max token");
      @(negedge clk); sfm_red_valid = 0;
      for (int i = 0; i < 12 && busy; i++) @(negedge clk);
      ck(!busy, "idle after the reduction");
      ck(nread == L * NO, "one register read per chunk");
      if (!starve) ck(gaps_bad == 0 && gaps_ok == (L - 1) * NO, "12-cycle accumulate spacing");
      else ck(stalls > 0, "weight stall seen");
      $display("run %0d: %0d tiles, %0d stall cycles", r, n_iss, stalls);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
