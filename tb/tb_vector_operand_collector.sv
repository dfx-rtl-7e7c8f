// tb_vector_operand_collector: register-file, buffer, VFU and SFU_V models around the vector
// operand collector. Checks, per instruction type, the register read addresses (one vector
// per cycle), the VFU opcode and operands (including the scalar broadcast of VEXP and
// F_SCALAR), the bypass for VLOAD/VSTORE, waiting for an empty buffer, the write-back
// addresses or buffer pushes, the VACCUM post-operation flags and scalar write, and that busy
// covers the whole instruction.
`timescale 1ns/1ps
module tb_vector_operand_collector;
  import dfx_pkg::*;
  localparam int LAT = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic issue, busy, bypass_o; instr_t ins; logic [15:0] len;
  logic [1:0] vre; logic [1:0][8:0] vraddr; fp16_t [1:0][63:0] vrdata;
  logic sre; logic [5:0] sraddr; fp16_t srdata;
  logic ld_avail, ld_pop, rx_avail, rx_pop, st_push, kv_push, tx_push;
  fp16_t [63:0] ld_data, rx_data, vfu_a, vfu_b;
  logic vfu_valid; logic [2:0] vfu_op;
  logic sfv_start, sfv_accum, sfv_vec_valid, sfv_sc_valid; logic [15:0] sfv_nvec; logic [3:0] sfv_post;
  logic vwe, swe; logic [8:0] vwaddr; logic [5:0] swaddr;
  vector_operand_collector dut (.*);
  // register file model: vector a holds value a in every element, scalar s holds s + 1000
  always_ff @(posedge clk) begin
    for (int p = 0; p < 2; p++) if (vre[p]) for (int e = 0; e < 64; e++) vrdata[p][e] <= 16'(vraddr[p]);
    if (sre) srdata <= 16'(1000 + sraddr);
  end
  // VFU + SFU_V model
  logic [LAT-1:0] pv;
  int acc_n;
  always_ff @(posedge clk) begin
    pv <= rst_n ? {pv[LAT-2:0], vfu_valid} : '0;
    sfv_sc_valid <= 1'b0;
    if (pv[LAT-1] && sfv_accum) begin
      acc_n <= acc_n + 1;
      if (acc_n + 1 == int'(sfv_nvec)) begin sfv_sc_valid <= 1'b1; acc_n <= 0; end
    end
  end
  assign sfv_vec_valid = pv[LAT-1] && !sfv_accum;
  initial begin : watchdog
    #2_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  task automatic ck(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", m); end
  endtask
  int nrd, nvfu, nwr, nbyp, npush, nsc;
  int exp_op, exp_b, exp_wbase, src1, src2;
  always @(posedge clk) if (rst_n) begin
    if (vre[0]) begin ck(vraddr[0] == 9'(src1 + nrd), "src1 address"); nrd++; end
    if (vre[1]) ck(vraddr[1] == 9'(src2 + nrd - 1), "src2 address");
    if (vfu_valid) begin
      ck(vfu_op == 3'(exp_op), "VFU opcode");
      if (exp_b >= 0) ck(vfu_b[5] == 16'(exp_b), "scalar broadcast");
      nvfu++;
    end
    if (bypass_o) nbyp++;
    if (vwe) begin ck(vwaddr == 9'(exp_wbase + nwr), "write address"); nwr++; end
    if (st_push || kv_push || tx_push) npush++;
    if (swe) nsc++;
  end
  task automatic run(op_e op, int flags, int s1, int s2, int d, int l, int aux, int eop, int eb);
    @(negedge clk);
    nrd = 0; nvfu = 0; nwr = 0; nbyp = 0; npush = 0; nsc = 0; acc_n = 0;
    exp_op = eop; exp_b = eb; exp_wbase = d; src1 = s1; src2 = s2;
    ins = '0; ins.itype = IT_COMPUTE; ins.op = op; ins.flags = 9'(flags);
    ins.src1 = 24'(s1); ins.src2 = 24'(s2); ins.dst = 24'(d); ins.aux = 16'(aux);
    len = 16'(l); issue = 1;
    @(negedge clk); issue = 0;
    while (busy) @(negedge clk);
  endtask
  initial begin
    issue = 0; ins = '0; len = 0; ld_avail = 0; rx_avail = 0; ld_data = '0; rx_data = '0;
    pv = '0; acc_n = 0; sfv_sc_valid = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(OP_VADD, 0, 10, 20, 30, 3, 0, 0, -1);
    ck(nrd == 3 && nvfu == 3 && nwr == 3, $sformatf("VADD: %0d reads, %0d ops, %0d writes", nrd, nvfu, nwr));
    run(OP_VSUB, 1 << F_SCALAR, 40, 7, 60, 2, 0, 1, 1007);
    ck(nvfu == 2 && nwr == 2, "VSUB scalar");
    run(OP_VEXP, 0, 70, 3, 80, 2, 0, 3, 1003);
    ck(nvfu == 2 && nwr == 2, "VEXP minus scalar");
    run(OP_VMUL, 0, 5, 6, 90, 1, 0, 2, -1);
    ck(nwr == 1, "VMUL");
    run(OP_VACCUM, (1 << F_MEAN) | (1 << F_RSQRT), 100, 0, 12, 4, 0, 4, -1);
    ck(nsc == 1 && nwr == 0 && nbyp == 4, "VACCUM: one scalar write");
    run(OP_VSTORE, 0, 110, 0, 0, 2, BUF_TX, 4, -1);
    ck(npush == 2 && nwr == 0 && nbyp == 2, "VSTORE to TX");
    // VLOAD from RX waits for the buffer
    fork
      run(OP_VLOAD, 0, 0, 0, 120, 2, BUF_RX, 4, -1);
      begin
        repeat (10) @(negedge clk);
        ck(busy && nvfu == 0, "VLOAD waits for RX");
        rx_avail = 1; rx_data = {64{16'h1234}};
      end
    join
    ck(nwr == 2 && nbyp == 2, "VLOAD from RX");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
