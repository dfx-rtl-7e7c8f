// tb_dfx_core: end-to-end test of a two-core DFX ring running a small GPT-2 decoder.
//
// Two dfx_core instances (default parameters) are joined in a ring: the right link of each
// drives the left link of the other. Each core has its own HBM and DDR model (in-order
// responses after a fixed latency; HBM writes honour the per-element strobes, DDR writes the
// byte strobes). The test writes the same program into both cores:
//   EMBED : token + position embedding (D_EMB, VLOAD, VADD)
//   LAYER : LayerNorm, Q/K/V (one head per core), key store and transposed value store,
//           masked scaled Q x K^T with row max, softmax (VEXP, VACCUM 1/sum, VMUL),
//           S x V, all-gather of the heads, output projection (column slice per core),
//           all-gather, residual, LayerNorm, FC1 with GELU (column slice), all-gather,
//           FC2, all-gather, residual
//   HEAD  : final LayerNorm, LM head with arg-max (computed by every core), token store
// The model has emb 128 (2 heads of 64, one per core), 2 layers, vocabulary 128, 4 input
// tokens and 3 output tokens. Each core holds different layer weights (its slices) but the
// same embeddings, LayerNorm parameters and LM head, so after every all-gather both cores hold
// the same hidden state and must generate the same tokens.
// Checks: both cores finish; each generates n_out tokens, equal between the cores and inside
// the vocabulary; both hold the same hidden state at the end (the all-gathers worked); the tokens written to each DDR output list equal the generated ones; the
// key of each token is found in HBM; and every mechanism (weight stall, scoreboard hazard
// stall, VFU bypass, masking, GELU, router synchronization, transpose, token feedback)
// happened at least once.
`timescale 1ns/1ps
module tb_dfx_core;
  import dfx_pkg::*;
  localparam int NC = 2, HLAT = 12, DLAT = 6;
  localparam int N_IN = 4, N_OUT = 3, NL = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // ---------------- program ----------------
  instr_t prog[$];
  function automatic instr_t mk(itype_e it, op_e op, int flags, int s1, int s2, int d, int len,
                                int aux);
    instr_t i;
    i = '0;
    i.itype = it; i.op = op; i.flags = 9'(flags);
    i.src1 = 24'(s1); i.src2 = 24'(s2); i.dst = 24'(d); i.len = 16'(len); i.aux = 16'(aux);
    return i;
  endfunction
  function automatic int fl(int b); return 1 << b; endfunction
  task automatic C(op_e op, int flags, int s1, int s2, int d, int len, int aux = 0);
    prog.push_back(mk(IT_COMPUTE, op, flags, s1, s2, d, len, aux));
  endtask
  task automatic D(op_e op, int flags, int s1, int d, int len);
    prog.push_back(mk(IT_DMA, op, flags, s1, 0, d, len, 0));
  endtask
  task automatic R(int len);
    prog.push_back(mk(IT_ROUTER, OP_R_SYNC, 0, 0, 0, 0, len, 0));
  endtask
  task automatic END();
    prog.push_back(mk(IT_CTRL, OP_C_END, 0, 0, 0, 0, 0, 0));
  endtask
  // LayerNorm of v0..1 into v6..7, gamma/beta at DDR words g, b
  task automatic LN(int g, int b, int lf);
    C(OP_VACCUM, fl(F_MEAN), 0, 0, 0, 2);                         // s0 = mean
    C(OP_VSUB, fl(F_SCALAR), 0, 0, 2, 2);                         // v2 = x - mean
    C(OP_VMUL, 0, 2, 2, 4, 2);                                    // v4 = v2^2
    C(OP_VACCUM, fl(F_MEAN) | fl(F_EPS) | fl(F_RSQRT), 4, 0, 1, 2); // s1 = 1/sigma
    C(OP_VMUL, fl(F_SCALAR), 2, 1, 6, 2);
    D(OP_D_LDVEC, lf, g, 0, 2);
    C(OP_VLOAD, 0, 0, 0, 8, 2, BUF_LOAD);
    C(OP_VMUL, 0, 6, 8, 6, 2);
    D(OP_D_LDVEC, lf, b, 0, 2);
    C(OP_VLOAD, 0, 0, 0, 8, 2, BUF_LOAD);
    C(OP_VADD, 0, 6, 8, 6, 2);
  endtask
  // DDR word map
  localparam int DDR_LSTRIDE = 'h100, G1 = 'h00, B1 = 'h04, G2 = 'h08, B2 = 'h0C, BQ = 'h10;
  localparam int WTE = 'h10000, WPE = 'h20000, GF = 'h30000, BF = 'h30004;
  localparam int IN_TOK = 'h40000, OUT_TOK = 'h50000;
  // HBM beat map
  localparam int HBM_LSTRIDE = 'h1000, WQ = 'h000, WK = 'h010, WV = 'h020, WO = 'h030;
  localparam int W1 = 'h040, W2 = 'h080, KB = 'h100, VB = 'h200, LMH = 'h8000;
  int pc_embed, pc_layer, pc_head;
  task automatic build();
    int L;
    L = fl(F_LAYER);
    pc_embed = prog.size();
    D(OP_D_EMB, 0, WTE, 0, 2);
    D(OP_D_EMB, fl(F_WPE), WPE, 0, 2);
    C(OP_VLOAD, 0, 0, 0, 0, 2, BUF_LOAD);
    C(OP_VLOAD, 0, 0, 0, 2, 2, BUF_LOAD);
    C(OP_VADD, 0, 0, 2, 0, 2);
    END();
    pc_layer = prog.size();
    LN(G1, B1, L);
    D(OP_D_WEIGHT, L, WQ, 0, 8);  C(OP_CONV1D, 0, 6, 0, 10, 2, 1);
    D(OP_D_BIAS, L, BQ, 0, 1);    C(OP_VLOAD, 0, 0, 0, 9, 1, BUF_LOAD);
    C(OP_VADD, 0, 10, 9, 10, 1);
    D(OP_D_WEIGHT, L, WK, 0, 8);  C(OP_CONV1D, 0, 6, 0, 11, 2, 1);
    D(OP_D_WEIGHT, L, WV, 0, 8);  C(OP_CONV1D, 0, 6, 0, 12, 2, 1);
    C(OP_VSTORE, 0, 11, 0, 0, 1, BUF_KV); D(OP_D_STK, L, 0, KB, 1);
    C(OP_VSTORE, 0, 12, 0, 0, 1, BUF_KV); D(OP_D_STV, L, 0, VB, 1);
    D(OP_D_WEIGHT, L | fl(F_TS_IN), KB, 0, 4);
    C(OP_MASKED_MM, fl(F_TS_OUT) | fl(F_SCALE) | fl(F_MAX), 10, 2, 13, 1, 1);
    C(OP_VEXP, fl(F_TS_IN), 13, 2, 14, 1);
    C(OP_VACCUM, fl(F_RECIP) | fl(F_TS_IN), 14, 0, 3, 1);
    C(OP_VMUL, fl(F_SCALAR) | fl(F_TS_IN), 14, 3, 14, 1);
    D(OP_D_WEIGHT, L | fl(F_TS_IN), VB, 0, 4);
    C(OP_MM, fl(F_TS_IN), 14, 0, 15, 1, 1);
    C(OP_VSTORE, 0, 15, 0, 0, 1, BUF_TX); R(1); C(OP_VLOAD, 0, 0, 0, 16, 2, BUF_RX);
    D(OP_D_WEIGHT, L, WO, 0, 8);  C(OP_CONV1D, 0, 16, 0, 18, 2, 1);
    C(OP_VSTORE, 0, 18, 0, 0, 1, BUF_TX); R(1); C(OP_VLOAD, 0, 0, 0, 19, 2, BUF_RX);
    C(OP_VADD, 0, 0, 19, 0, 2);
    LN(G2, B2, L);
    D(OP_D_WEIGHT, L, W1, 0, 32); C(OP_CONV1D, fl(F_GELU), 6, 0, 21, 2, 4);
    C(OP_VSTORE, 0, 21, 0, 0, 4, BUF_TX); R(4); C(OP_VLOAD, 0, 0, 0, 25, 8, BUF_RX);
    D(OP_D_WEIGHT, L, W2, 0, 32); C(OP_CONV1D, 0, 25, 0, 33, 8, 1);
    C(OP_VSTORE, 0, 33, 0, 0, 1, BUF_TX); R(1); C(OP_VLOAD, 0, 0, 0, 34, 2, BUF_RX);
    C(OP_VADD, 0, 0, 34, 0, 2);
    END();
    pc_head = prog.size();
    LN(GF, BF, 0);
    D(OP_D_WEIGHT, 0, LMH, 0, 16); C(OP_MM, fl(F_ARGMAX), 6, 0, 40, 2, 2);
    D(OP_D_STTOK, 0, 0, 0, 1);
    END();
  endtask

  // ---------------- cores and memories ----------------
  logic [9:0]          ib_waddr;
  instr_t              ib_wdata;
  logic                ib_we, start;
  cfg_t                cfg [NC];
  logic [NC-1:0]       done, tok_valid, gen_stage;
  logic [NC-1:0][15:0] tok;
  logic [NC-1:0][7:0]  ev;
  logic [NC-1:0]       hrq, hwq, drq, dwq, rv;
  logic [NC-1:0][31:0] hra, hwa, dra, dwa;
  fp16_t [NC-1:0][15:0][63:0] hrd, hwd;
  logic  [NC-1:0][15:0][63:0] hws;
  fp16_t [NC-1:0][31:0] drd, dwd;
  logic  [NC-1:0][63:0] dws;
  logic  [NC-1:0]       hrv, drv;
  logic  [NC-1:0][255:0] rd;

  for (genvar c = 0; c < NC; c++) begin : g_core
    dfx_core u_core (
      .clk, .rst_n, .ib_we, .ib_waddr, .ib_wdata, .cfg_in(cfg[c]), .start, .done(done[c]),
      .tok_valid(tok_valid[c]), .tok(tok[c]), .ev(ev[c]), .gen_stage(gen_stage[c]),
      .hbm_rd_req(hrq[c]), .hbm_rd_addr(hra[c]), .hbm_rd_ready(1'b1), .hbm_rd_valid(hrv[c]),
      .hbm_rd_data(hrd[c]), .hbm_wr_req(hwq[c]), .hbm_wr_addr(hwa[c]), .hbm_wr_data(hwd[c]),
      .hbm_wr_strb(hws[c]), .hbm_wr_ready(1'b1),
      .ddr_rd_req(drq[c]), .ddr_rd_addr(dra[c]), .ddr_rd_ready(1'b1), .ddr_rd_valid(drv[c]),
      .ddr_rd_data(drd[c]), .ddr_wr_req(dwq[c]), .ddr_wr_addr(dwa[c]), .ddr_wr_data(dwd[c]),
      .ddr_wr_strb(dws[c]), .ddr_wr_ready(1'b1),
      .right_valid(rv[c]), .right_data(rd[c]),
      .left_valid(rv[(c + NC - 1) % NC]), .left_data(rd[(c + NC - 1) % NC]));
  end

  fp16_t [15:0][63:0] hbm [NC][int];
  fp16_t [31:0]       ddr [NC][int];
  logic  [HLAT-1:0]   hpv [NC];
  logic  [31:0]       hpa [NC][HLAT];
  logic  [DLAT-1:0]   dpv [NC];
  logic  [31:0]       dpa [NC][DLAT];

  always_ff @(posedge clk) begin
    for (int c = 0; c < NC; c++) begin
      hpv[c] <= {hpv[c][HLAT-2:0], hrq[c]};
      hpa[c][0] <= hra[c];
      for (int i = 1; i < HLAT; i++) hpa[c][i] <= hpa[c][i-1];
      dpv[c] <= {dpv[c][DLAT-2:0], drq[c]};
      dpa[c][0] <= dra[c];
      for (int i = 1; i < DLAT; i++) dpa[c][i] <= dpa[c][i-1];
      if (hwq[c]) begin
        fp16_t [15:0][63:0] b;
        b = hbm[c].exists(hwa[c]) ? hbm[c][hwa[c]] : '0;
        for (int j = 0; j < 16; j++)
          for (int e = 0; e < 64; e++)
            if (hws[c][j][e]) b[j][e] = hwd[c][j][e];
        hbm[c][hwa[c]] = b;
      end
      if (dwq[c]) begin
        fp16_t [31:0] w;
        w = ddr[c].exists(dwa[c]) ? ddr[c][dwa[c]] : '0;
        for (int j = 0; j < 32; j++)
          if (dws[c][2*j]) w[j] = dwd[c][j];
        ddr[c][dwa[c]] = w;
      end
    end
  end
  always_comb begin
    for (int c = 0; c < NC; c++) begin
      hrv[c] = hpv[c][HLAT-1];
      hrd[c] = hbm[c].exists(hpa[c][HLAT-1]) ? hbm[c][hpa[c][HLAT-1]] : '0;
      drv[c] = dpv[c][DLAT-1];
      drd[c] = ddr[c].exists(dpa[c][DLAT-1]) ? ddr[c][dpa[c][DLAT-1]] : '0;
    end
  end

  // ---------------- data ----------------
  function automatic fp16_t rw(int e_lo, int e_hi);    // random sign, exponent in [lo,hi]
    return {1'($urandom), 5'(e_lo + $urandom % (e_hi - e_lo + 1)), 10'($urandom)};
  endfunction
  task automatic init_mem();
    fp16_t [15:0][63:0] b;
    fp16_t [31:0] w;
    for (int c = 0; c < NC; c++) begin
      for (int l = 0; l < NL; l++)
        for (int a = 0; a < 'hC0; a++) begin
          for (int j = 0; j < 16; j++) for (int e = 0; e < 64; e++) b[j][e] = rw(8, 11);
          hbm[c][l * HBM_LSTRIDE + a] = b;
        end
    end
    for (int a = 0; a < 16; a++) begin
      for (int j = 0; j < 16; j++) for (int e = 0; e < 64; e++) b[j][e] = rw(9, 12);
      for (int c = 0; c < NC; c++) hbm[c][LMH + a] = b;
    end
    for (int a = 0; a < 128 * 4; a++) begin
      for (int j = 0; j < 32; j++) w[j] = rw(9, 13);
      for (int c = 0; c < NC; c++) ddr[c][WTE + a] = w;
      for (int j = 0; j < 32; j++) w[j] = rw(7, 11);
      for (int c = 0; c < NC; c++) ddr[c][WPE + a] = w;
    end
    for (int l = 0; l <= NL; l++) begin
      int base;
      base = (l == NL) ? GF - G1 : l * DDR_LSTRIDE;
      for (int k = 0; k < 4; k++) begin
        for (int j = 0; j < 32; j++) w[j] = {6'b001110, 10'($urandom)};   // gamma ~ 0.5..1
        for (int c = 0; c < NC; c++) begin
          ddr[c][base + G1 + k] = w;
          if (l < NL) ddr[c][base + G2 + k] = w;
        end
        for (int j = 0; j < 32; j++) w[j] = rw(8, 11);
        for (int c = 0; c < NC; c++) begin
          ddr[c][base + B1 + k] = w;
          if (l < NL) ddr[c][base + B2 + k] = w;
        end
      end
      if (l < NL) for (int k = 0; k < 2; k++) begin
        for (int j = 0; j < 32; j++) w[j] = rw(8, 11);
        for (int c = 0; c < NC; c++) ddr[c][base + BQ + k] = w;
      end
    end
    w = '0;
    for (int i = 0; i < N_IN; i++) w[i] = 16'($urandom % 128);
    for (int c = 0; c < NC; c++) ddr[c][IN_TOK] = w;
  endtask

  // ---------------- monitors ----------------
  int ev_cnt [8];
  int toks [NC][$];
  always_ff @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) begin
      for (int b = 0; b < 8; b++) if (ev[c][b]) ev_cnt[b]++;
      if (tok_valid[c]) toks[c].push_back(int'(tok[c]));
    end
  end

  initial begin : watchdog
    #(3_000_000 * 10);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  string names [8] = '{"weight stall", "hazard stall", "bypass", "mask", "gelu", "sync",
                       "transpose", "token"};
  initial begin
    int cyc;
    ib_we = 1'b0; ib_waddr = '0; ib_wdata = '0; start = 1'b0;
    for (int c = 0; c < NC; c++) begin
      hpv[c] = '0; dpv[c] = '0;
      for (int i = 0; i < HLAT; i++) hpa[c][i] = '0;
      for (int i = 0; i < DLAT; i++) dpa[c][i] = '0;
    end
    build();
    init_mem();
    for (int c = 0; c < NC; c++) begin
      cfg[c] = '0;
      cfg[c].core_id = 8'(c);
      cfg[c].n_cores = 8'(NC);
      cfg[c].n_layers = 8'(NL);
      cfg[c].n_in = 16'(N_IN);
      cfg[c].n_out = 16'(N_OUT);
      cfg[c].pc_embed = 12'(pc_embed);
      cfg[c].pc_layer = 12'(pc_layer);
      cfg[c].pc_head = 12'(pc_head);
      cfg[c].hbm_layer_stride = HBM_LSTRIDE;
      cfg[c].ddr_layer_stride = DDR_LSTRIDE;
      cfg[c].in_tok_addr = IN_TOK;
      cfg[c].out_tok_addr = OUT_TOK;
      cfg[c].emb_words = 16'd4;
      cfg[c].inv_emb = 16'h2000;      // 1/128
      cfg[c].eps = 16'h0400;          // 2^-14
      cfg[c].attn_scale = 16'h3000;   // 1/sqrt(64)
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    foreach (prog[i]) begin
      @(negedge clk);
      ib_we = 1'b1; ib_waddr = 10'(i); ib_wdata = prog[i];
    end
    @(negedge clk);
    ib_we = 1'b0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 0;
    while (done != '1) begin
      @(posedge clk);
      cyc++;
    end
    repeat (5) @(posedge clk);
    $display("run: %0d instructions, %0d cycles", prog.size(), cyc);
    for (int c = 0; c < NC; c++) begin
      check(toks[c].size() == N_OUT, $sformatf("core %0d generated %0d tokens", c, toks[c].size()));
      for (int k = 0; k < toks[c].size() && k < N_OUT; k++) begin
        fp16_t [31:0] w;
        check(toks[c][k] == toks[0][k], $sformatf("core %0d token %0d differs", c, k));
        check(toks[c][k] < 128, "token outside vocabulary");
        w = ddr[c].exists(OUT_TOK) ? ddr[c][OUT_TOK] : '0;
        check(int'(w[k]) == toks[c][k], $sformatf("core %0d DDR token %0d", c, k));
      end
      // the key of the last position of layer 1 is in lane t%16 of beat KB + t/16
      begin
        fp16_t [15:0][63:0] b;
        int t;
        t = N_IN + N_OUT - 2;
        b = hbm[c].exists(HBM_LSTRIDE + KB + t / 16) ? hbm[c][HBM_LSTRIDE + KB + t / 16] : '0;
        check(b[t % 16] != '0, "key stored in HBM");
      end
    end
    // after the last all-gather both cores must hold the same residual stream (registers 0, 1)
    for (int r = 0; r < 2; r++) begin
      check(g_core[0].u_core.u_vrf.g_bank[0].mem[r] == g_core[1].u_core.u_vrf.g_bank[0].mem[r],
            $sformatf("hidden state register %0d differs between the cores", r));
      check(g_core[0].u_core.u_vrf.g_bank[0].mem[r] != '0, "hidden state is not zero");
    end
    $display("tokens core0: %p", toks[0]);
    for (int b = 0; b < 8; b++) begin
      $display("mechanism %-12s : %0d", names[b], ev_cnt[b]);
      check(ev_cnt[b] > 0, $sformatf("mechanism %s never happened", names[b]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
