// tb_scheduler: a random program section (matrix, vector, dma and router instructions, then
// OP_C_END) is run against models of the instruction buffer, of the four units (busy for a
// random time after issue) and of the scoreboard (random hazards). Checks: instructions issue
// in program order, each to the unit of its type, never to a busy unit nor under a hazard;
// token-scaled lengths; the scoreboard ranges of a vector instruction; sec_done only after
// every unit is idle; and without stalls one instruction every two cycles.
`timescale 1ns/1ps
module tb_scheduler;
  import dfx_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic sec_start, sec_done, ib_re, sb_hazard, sb_issue, hazard_stall;
  logic [11:0] sec_pc; logic [15:0] token_pos;
  logic [9:0] ib_raddr; instr_t ib_rdata, iss_instr;
  logic [3:0] unit_busy, issue; logic [15:0] iss_len, iss_nout;
  logic [2:0] sb_src_en; logic [2:0][15:0] sb_src_base, sb_src_len;
  logic [1:0] sb_dst_en, sb_unit; logic [15:0] sb_dst_base, sb_dst_len, sb_sdst;
  scheduler dut (.*);
  instr_t mem [1024];
  always_ff @(posedge clk) if (ib_re) ib_rdata <= mem[ib_raddr];
  int busy_left [4];
  bit rand_haz;
  always_comb for (int u = 0; u < 4; u++) unit_busy[u] = busy_left[u] > 0;
  initial begin : watchdog
    #1_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  task automatic ck(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", m); end
  endtask
  int nexp, nissued, first_cyc, last_cyc, cyc;
  op_e ops [8] = '{OP_MM, OP_CONV1D, OP_VADD, OP_VMUL, OP_D_WEIGHT, OP_D_LDVEC, OP_R_SYNC, OP_VLOAD};
  itype_e its [8] = '{IT_COMPUTE, IT_COMPUTE, IT_COMPUTE, IT_COMPUTE, IT_DMA, IT_DMA, IT_ROUTER, IT_COMPUTE};
  int units [8] = '{0, 0, 1, 1, 2, 2, 3, 1};
  always @(posedge clk) begin
    cyc++;
    for (int u = 0; u < 4; u++) if (busy_left[u] > 0) busy_left[u]--;
    if (rst_n && issue != 0) begin
      int k; instr_t e;
      e = mem[100 + nissued];
      ck($onehot(issue), "one unit per issue");
      ck(iss_instr == e, $sformatf("order at %0d", nissued));
      for (int j = 0; j < 8; j++)
        if (e.op == ops[j]) ck(issue[units[j]], "unit of the instruction type");
      for (int u = 0; u < 4; u++) if (issue[u]) ck(busy_left[u] == 0, "issue to busy unit");
      ck(!sb_hazard, "issue under hazard");
      ck(iss_len == (e.flags[F_TS_IN] ? e.len * 16'(token_pos / 64 + 1) : e.len), "scaled len");
      if (e.op == OP_VADD) begin
        ck(sb_src_en == 3'b011 && sb_src_base[0] == e.src1[15:0] && sb_src_base[1] == e.src2[15:0]
           && sb_dst_en == 2'b01 && sb_dst_base == e.dst[15:0], "vector ranges");
      end
      for (int u = 0; u < 4; u++) if (issue[u]) busy_left[u] = rand_haz ? 1 + $urandom % 12 : 0;
      if (nissued == 0) first_cyc = cyc;
      last_cyc = cyc;
      nissued++;
    end
  end
  always @(negedge clk) sb_hazard = rand_haz && ($urandom % 4 == 0);
  initial begin
    sec_start = 0; sec_pc = 0; token_pos = 16'd130; sb_hazard = 0; rand_haz = 1;
    foreach (busy_left[u]) busy_left[u] = 0;
    nissued = 0; cyc = 0;
    for (int pass = 0; pass < 2; pass++) begin
      nexp = 40;
      for (int i = 0; i < nexp; i++) begin
        int j; instr_t e;
        j = $urandom % 8;
        e = {$urandom, $urandom, $urandom, $urandom};
        e.itype = its[j]; e.op = ops[j]; e.flags[F_TS_IN] = 1'($urandom); e.flags[F_SCALAR] = 0;
        e.len = 16'($urandom % 9 + 1);
        mem[100 + i] = e;
      end
      mem[100 + nexp] = '0;
      mem[100 + nexp].itype = IT_CTRL; mem[100 + nexp].op = OP_C_END;
      rand_haz = (pass == 0);
      nissued = 0;
      if (pass == 0) begin repeat (2) @(negedge clk); rst_n = 1; end
      @(negedge clk); sec_pc = 12'd100; sec_start = 1; @(negedge clk); sec_start = 0;
      while (!sec_done) begin
        @(posedge clk); #1;
        if (sec_done) ck(unit_busy == 0, "sec_done with busy units");
      end
      ck(nissued == nexp, $sformatf("issued %0d of %0d", nissued, nexp));
      if (pass == 1) begin
        $display("issue rate without stalls: %0d instructions in %0d cycles", nexp, last_cyc - first_cyc + 1);
        ck(last_cyc - first_cyc == 2 * (nexp - 1), "one instruction every two cycles");
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
