// tb_dma: the DMA against HBM and DDR models (fixed read latency, strobed writes).
//   D_WEIGHT 40 beats with a slow consumer: beats arrive in order, the weight FIFO never
//            holds more than its 32 entries, and with a fast consumer a beat is delivered
//            every cycle once the pipeline is full (the HBM rate)
//   D_LDVEC  three vectors assembled from pairs of DDR words
//   D_EMB    token row (token read from the DDR input list) and position row
//   D_STK / D_STV  key lane and transposed value layout in HBM (with the layer offset)
//   D_STVEC / D_STTOK  vector and token written to DDR with strobes
`timescale 1ns/1ps
module tb_dma;
  import dfx_pkg::*;
  localparam int HLAT = 10, DLAT = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic issue, busy, transpose_o; instr_t ins; logic [15:0] len, token_pos, gen_tok;
  cfg_t cfg; logic [7:0] layer;
  logic hbm_rd_req, hbm_rd_valid, hbm_wr_req, ddr_rd_req, ddr_rd_valid, ddr_wr_req;
  logic [31:0] hbm_rd_addr, hbm_wr_addr, ddr_rd_addr, ddr_wr_addr;
  fp16_t [15:0][63:0] hbm_rd_data, hbm_wr_data, w_data; logic [15:0][63:0] hbm_wr_strb;
  fp16_t [31:0] ddr_rd_data, ddr_wr_data; logic [63:0] ddr_wr_strb;
  logic w_pop, ld_pop, ld_avail, st_push, kv_push; logic [5:0] w_count;
  fp16_t [63:0] ld_data, vec_in;
  dma dut (.*, .hbm_rd_ready(1'b1), .hbm_wr_ready(1'b1), .ddr_rd_ready(1'b1),
           .ddr_wr_ready(1'b1));
  fp16_t [15:0][63:0] hbm [int];
  fp16_t [31:0] ddr [int];
  logic [HLAT-1:0] hv; logic [31:0] ha [HLAT];
  logic [DLAT-1:0] dv; logic [31:0] da [DLAT];
  always_ff @(posedge clk) begin
    hv <= {hv[HLAT-2:0], hbm_rd_req}; ha[0] <= hbm_rd_addr;
    for (int i = 1; i < HLAT; i++) ha[i] <= ha[i-1];
    dv <= {dv[DLAT-2:0], ddr_rd_req}; da[0] <= ddr_rd_addr;
    for (int i = 1; i < DLAT; i++) da[i] <= da[i-1];
    if (hbm_wr_req) begin
      fp16_t [15:0][63:0] b;
      b = hbm.exists(hbm_wr_addr) ? hbm[hbm_wr_addr] : '0;
      for (int j = 0; j < 16; j++) for (int e = 0; e < 64; e++)
        if (hbm_wr_strb[j][e]) b[j][e] = hbm_wr_data[j][e];
      hbm[hbm_wr_addr] = b;
    end
    if (ddr_wr_req) begin
      fp16_t [31:0] w;
      w = ddr.exists(ddr_wr_addr) ? ddr[ddr_wr_addr] : '0;
      for (int j = 0; j < 32; j++) if (ddr_wr_strb[2*j]) w[j] = ddr_wr_data[j];
      ddr[ddr_wr_addr] = w;
    end
  end
  assign hbm_rd_valid = hv[HLAT-1];
  assign hbm_rd_data  = hbm.exists(ha[HLAT-1]) ? hbm[ha[HLAT-1]] : '0;
  assign ddr_rd_valid = dv[DLAT-1];
  assign ddr_rd_data  = ddr.exists(da[DLAT-1]) ? ddr[da[DLAT-1]] : '0;
  initial begin : watchdog
    #2_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  task automatic ck(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", m); end
  endtask
  task automatic run(op_e op, int flags, int s1, int d, int l);
    @(negedge clk);
    ins = '0; ins.itype = IT_DMA; ins.op = op; ins.flags = 9'(flags); ins.src1 = 24'(s1);
    ins.dst = 24'(d); len = 16'(l); issue = 1;
    @(negedge clk); issue = 0;
  endtask
  task automatic wait_idle();
    while (busy) @(negedge clk);
  endtask
  initial begin
    int maxc, got, t0;
    issue = 0; ins = '0; len = 0; token_pos = 0; gen_tok = 0; layer = 0; cfg = '0;
    w_pop = 0; ld_pop = 0; st_push = 0; kv_push = 0; vec_in = '0; hv = '0; dv = '0;
    foreach (ha[i]) ha[i] = '0;
    foreach (da[i]) da[i] = '0;
    cfg.hbm_layer_stride = 32'h1000; cfg.ddr_layer_stride = 32'h100;
    cfg.in_tok_addr = 32'h4000; cfg.out_tok_addr = 32'h5000; cfg.emb_words = 16'd4;
    cfg.n_in = 16'd5;
    for (int a = 0; a < 40; a++) begin
      fp16_t [15:0][63:0] b;
      for (int j = 0; j < 16; j++) for (int e = 0; e < 64; e++) b[j][e] = 16'($urandom);
      hbm[32'h1000 + a] = b;
    end
    for (int a = 0; a < 1024; a++) ddr[a] = {16{$urandom}};
    repeat (2) @(negedge clk); rst_n = 1;
    // ---- D_WEIGHT, slow consumer
    layer = 1;
    run(OP_D_WEIGHT, 1 << F_LAYER, 0, 0, 40);
    maxc = 0; got = 0;
    while (got < 40) begin
      if (int'(w_count) > maxc) maxc = int'(w_count);
      if (w_count != 0 && ($urandom % 3 == 0)) begin
        ck(w_data == hbm[32'h1000 + got], $sformatf("weight beat %0d", got));
        w_pop = 1; got++;
      end
      @(negedge clk); w_pop = 0;
    end
    ck(maxc <= 32, "weight FIFO bound");
    ck(maxc >= 30, "prefetch fills the FIFO");
    wait_idle();
    // ---- D_WEIGHT, fast consumer: one beat per cycle after the latency
    run(OP_D_WEIGHT, 1 << F_LAYER, 0, 0, 32);
    t0 = 0; got = 0;
    while (got < 32) begin
      if (w_count != 0) begin w_pop = 1; got++; end
      @(negedge clk); w_pop = 0; t0++;
    end
    $display("32 weight beats in %0d cycles", t0);
    ck(t0 <= 32 + HLAT + 4, "HBM beat rate");
    wait_idle();
    // ---- D_LDVEC
    layer = 2;
    run(OP_D_LDVEC, 1 << F_LAYER, 16, 0, 3);
    wait_idle();
    for (int i = 0; i < 3; i++) begin
      ck(ld_avail, "load vector present");
      ck(ld_data == {ddr[512 + 16 + 2*i + 1], ddr[512 + 16 + 2*i]}, $sformatf("load vector %0d", i));
      @(negedge clk); ld_pop = 1; @(negedge clk); ld_pop = 0;
    end
    // ---- D_EMB: token from the input list, then the position row
    ddr[32'h4000] = '0; ddr[32'h4000][3] = 16'd7;
    token_pos = 3;
    run(OP_D_EMB, 0, 100, 0, 2);
    wait_idle();
    for (int i = 0; i < 2; i++) begin
      ck(ld_data == {ddr[100 + 7*4 + 2*i + 1], ddr[100 + 7*4 + 2*i]}, "token embedding row");
      @(negedge clk); ld_pop = 1; @(negedge clk); ld_pop = 0;
    end
    token_pos = 9; gen_tok = 16'd11;
    run(OP_D_EMB, 0, 100, 0, 1);
    wait_idle();
    ck(ld_data == {ddr[100 + 11*4 + 1], ddr[100 + 11*4]}, "generated-token embedding row");
    @(negedge clk); ld_pop = 1; @(negedge clk); ld_pop = 0;
    run(OP_D_EMB, 1 << F_WPE, 200, 0, 1);
    wait_idle();
    ck(ld_data == {ddr[200 + 9*4 + 1], ddr[200 + 9*4]}, "position embedding row");
    @(negedge clk); ld_pop = 1; @(negedge clk); ld_pop = 0;
    // ---- D_STK and D_STV for token 70, layer 1
    layer = 1; token_pos = 70;
    for (int e = 0; e < 64; e++) vec_in[e] = 16'($urandom);
    @(negedge clk); kv_push = 1; @(negedge clk); kv_push = 0;
    run(OP_D_STK, 1 << F_LAYER, 0, 32'h100, 1);
    wait_idle();
    ck(hbm[32'h1100 + 70 / 16][70 % 16] == vec_in, "key lane");
    @(negedge clk); kv_push = 1; @(negedge clk); kv_push = 0;
    run(OP_D_STV, 1 << F_LAYER, 0, 32'h200, 1);
    wait_idle();
    for (int c = 0; c < 4; c++) for (int j = 0; j < 16; j++)
      ck(hbm[32'h1200 + (70 / 64) * 4 + c][j][70 % 64] == vec_in[c*16 + j], "transposed value");
    // ---- D_STVEC and D_STTOK
    layer = 0;
    @(negedge clk); st_push = 1; @(negedge clk); st_push = 0;
    run(OP_D_STVEC, 0, 0, 600, 1);
    wait_idle();
    ck({ddr[601], ddr[600]} == vec_in, "stored vector");
    token_pos = 6; gen_tok = 16'd99;
    ddr[32'h5000] = '0;
    run(OP_D_STTOK, 0, 0, 0, 1);
    wait_idle();
    ck(ddr[32'h5000][2] == 16'd99 && ddr[32'h5000][1] == 16'd0, "token stored with strobes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
