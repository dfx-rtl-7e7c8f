// dfx_core: one DFX compute core, the accelerator placed on each FPGA of the appliance.
//
// The core runs a GPT-2 decoder for text generation under the control of a program stored in
// its instruction buffer. The host writes the program and a configuration (core id, number of
// cores, layers, input/output lengths, section start addresses, memory layout) and pulses
// start. The controller then walks the tokens: for every token position t it runs the
// EMBED section once, the LAYER section once per decoder layer, and, from the last input token
// on, the LM-HEAD section whose arg-max produces the next token (fed back to the embedding
// lookup and stored to DDR). Inputs are processed one token at a time, so the summarization
// stage and the generation stage share the same datapath, as in the paper.
//
// Datapath:
//   control unit     controller -> scheduler (fetch, decode, per-unit issue) + scoreboard
//   register files   vector (512 x 64 fp16, 3 read / 2 write ports), scalar (64 fp16)
//   MPU              matrix operand collector -> MFU (16 lanes x 64 multipliers, adder
//                    trees, accumulators) -> SFU_M (scale, mask, GELU, vectorize, max/argmax)
//   VPU              vector operand collector -> VFU (add/sub/mul/exp/bypass) -> SFU_V
//                    (sum, mean, +eps, reciprocal, rsqrt)
//   DMA              HBM weight/key/value beats and DDR vectors/tokens, with transpose
//   router           ring all-gather between the cores
// The intra-layer model parallelism of the paper (heads and weight columns split over the
// cores, synchronized by the router) is expressed by the program each core runs.
//
// ev (one pulse per event): 0 weight stall of the MPU, 1 scoreboard hazard stall, 2 VFU
// bypass, 3 masked matrix result, 4 GELU result, 5 router synchronization done, 6 transposed
// value write, 7 token generated.
// Lint notes: the MFU's out_slot output is unused here because the SFU_M vectorizer counts
// groups itself.
module dfx_core
  import dfx_pkg::*;
#(
  parameter int unsigned IB_DEPTH = 1024,
  parameter int unsigned VDEPTH   = 512,
  parameter int unsigned SDEPTH   = 64,
  parameter int unsigned FLIT     = 256
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // host
  input  logic                        ib_we,
  input  logic [$clog2(IB_DEPTH)-1:0] ib_waddr,
  input  instr_t                      ib_wdata,
  input  cfg_t                        cfg_in,
  input  logic                        start,
  output logic                        done,
  output logic                        tok_valid,
  output logic [15:0]                 tok,
  output logic [7:0]                  ev,
  output logic                        gen_stage,   // generation (not summarization) stage
  // HBM
  output logic                        hbm_rd_req,
  output logic [31:0]                 hbm_rd_addr,
  input  logic                        hbm_rd_ready,
  input  logic                        hbm_rd_valid,
  input  fp16_t [15:0][63:0]          hbm_rd_data,
  output logic                        hbm_wr_req,
  output logic [31:0]                 hbm_wr_addr,
  output fp16_t [15:0][63:0]          hbm_wr_data,
  output logic [15:0][63:0]           hbm_wr_strb,
  input  logic                        hbm_wr_ready,
  // DDR
  output logic                        ddr_rd_req,
  output logic [31:0]                 ddr_rd_addr,
  input  logic                        ddr_rd_ready,
  input  logic                        ddr_rd_valid,
  input  fp16_t [31:0]                ddr_rd_data,
  output logic                        ddr_wr_req,
  output logic [31:0]                 ddr_wr_addr,
  output fp16_t [31:0]                ddr_wr_data,
  output logic [63:0]                 ddr_wr_strb,
  input  logic                        ddr_wr_ready,
  // ring
  output logic                        right_valid,
  output logic [FLIT-1:0]             right_data,
  input  logic                        left_valid,
  input  logic [FLIT-1:0]             left_data
);
  localparam int unsigned VA = $clog2(VDEPTH);
  localparam int unsigned SA = $clog2(SDEPTH);

  // ---------------- control unit ----------------
  cfg_t        cfg;
  logic        sec_start, sec_done, sb_stall;
  logic [11:0] sec_pc;
  logic [7:0]  layer;
  logic [15:0] token_pos;
  controller u_ctrl (
    .clk, .rst_n, .start, .cfg_in, .cfg, .done, .sec_start, .sec_pc, .sec_done,
    .layer, .token_pos, .gen_stage);

  logic                        ib_re;
  logic [$clog2(IB_DEPTH)-1:0] ib_raddr;
  instr_t                      ib_rdata;
  instr_buffer #(.DEPTH(IB_DEPTH)) u_ib (
    .clk, .we(ib_we), .waddr(ib_waddr), .wdata(ib_wdata), .re(ib_re), .raddr(ib_raddr),
    .rdata(ib_rdata));

  logic [3:0]       unit_busy, unit_busy_q, issue;
  instr_t           iss_instr;
  logic [15:0]      iss_len, iss_nout;
  logic [2:0]       sb_src_en;
  logic [2:0][15:0] sb_src_base, sb_src_len;
  logic [1:0]       sb_dst_en, sb_unit;
  logic [15:0]      sb_dst_base, sb_dst_len, sb_sdst;
  logic             sb_hazard, sb_issue;
  scheduler #(.IB_DEPTH(IB_DEPTH)) u_sched (
    .clk, .rst_n, .sec_start, .sec_pc, .sec_done, .token_pos, .ib_re, .ib_raddr, .ib_rdata,
    .unit_busy, .issue, .iss_instr, .iss_len, .iss_nout, .sb_src_en, .sb_src_base,
    .sb_src_len, .sb_dst_en, .sb_dst_base, .sb_dst_len, .sb_sdst, .sb_hazard, .sb_issue,
    .sb_unit, .hazard_stall(sb_stall));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) unit_busy_q <= '0;
    else        unit_busy_q <= unit_busy;

  scoreboard #(.VDEPTH(VDEPTH), .SDEPTH(SDEPTH), .NU(4)) u_sb (
    .clk, .rst_n, .src_en(sb_src_en), .src_base(sb_src_base), .src_len(sb_src_len),
    .dst_en(sb_dst_en), .dst_base(sb_dst_base), .dst_len(sb_dst_len), .sdst(sb_sdst),
    .hazard(sb_hazard), .issue(sb_issue), .issue_unit(sb_unit),
    .unit_done(unit_busy_q & ~unit_busy));

  // ---------------- register files ----------------
  logic [2:0]                vre;
  logic [2:0][VA-1:0]        vraddr;
  fp16_t [2:0][63:0]         vrdata;
  logic [1:0]                vwe;
  logic [1:0][VA-1:0]        vwaddr;
  fp16_t [1:0][63:0]         vwdata;
  vector_regfile #(.DIM(64), .DEPTH(VDEPTH), .NRD(3)) u_vrf (
    .clk, .we(vwe), .waddr(vwaddr), .wdata(vwdata), .re(vre), .raddr(vraddr), .rdata(vrdata));

  logic [1:0]                swe;
  logic [1:0][SA-1:0]        swaddr;
  fp16_t [1:0]               swdata;
  logic                      sre;
  logic [SA-1:0]             sraddr;
  fp16_t                     srdata;
  scalar_regfile #(.DEPTH(SDEPTH), .NRD(1)) u_srf (
    .clk, .we(swe), .waddr(swaddr), .wdata(swdata), .re(sre),
    .raddr(sraddr), .rdata(srdata));

  // ---------------- MPU ----------------
  logic [5:0]         w_count;
  logic               w_pop;
  fp16_t [15:0][63:0] w_data;
  logic               mfu_valid, mfu_first, mfu_last;
  logic [1:0]         mfu_slot;
  logic               sfm_start, sfm_gelu, sfm_scale, sfm_mask, sfm_vec_valid, sfm_red_valid;
  logic [15:0]        sfm_groups, sfm_red_idx;
  fp16_t              sfm_red_max;
  fp16_t [63:0]       sfm_vec;
  logic               m_stall, m_tok_valid;
  logic [15:0]        m_tok;
  matrix_operand_collector #(.VDEPTH(VDEPTH), .SDEPTH(SDEPTH)) u_moc (
    .clk, .rst_n, .issue(issue[0]), .ins(iss_instr), .len(iss_len), .nout(iss_nout),
    .busy(unit_busy[0]), .stall_o(m_stall), .vre(vre[0]), .vraddr(vraddr[0]),
    .w_count, .w_pop, .mfu_valid, .mfu_first, .mfu_last, .mfu_slot, .sfm_start, .sfm_gelu,
    .sfm_scale, .sfm_mask, .sfm_groups, .sfm_vec_valid, .sfm_red_valid, .sfm_red_max,
    .sfm_red_idx, .vwe(vwe[0]), .vwaddr(vwaddr[0]), .swe(swe[0]), .swaddr(swaddr[0]),
    .swdata(swdata[0]), .tok_valid(m_tok_valid), .tok(m_tok));
  assign vwdata[0] = sfm_vec;

  logic               mfu_out_valid;
  logic [1:0]         mfu_out_slot;
  fp16_t [15:0]       mfu_out;
  mfu #(.DIM(64), .LANES(16), .SLOTS(4)) u_mfu (
    .clk, .rst_n, .in_valid(mfu_valid), .first(mfu_first), .last(mfu_last),
    .slot(mfu_slot), .bias('0), .x(vrdata[0]), .w(w_data), .out_valid(mfu_out_valid),
    .out_slot(mfu_out_slot), .out(mfu_out));

  sfu_m #(.DIM(64), .LANES(16)) u_sfm (
    .clk, .rst_n, .start(sfm_start), .gelu_en(sfm_gelu), .scale_en(sfm_scale),
    .mask_en(sfm_mask), .scale(cfg.attn_scale), .mask_pos(token_pos), .n_groups(sfm_groups),
    .in_valid(mfu_out_valid), .in(mfu_out), .vec_valid(sfm_vec_valid), .vec(sfm_vec),
    .red_valid(sfm_red_valid), .red_max(sfm_red_max), .red_idx(sfm_red_idx));

  // generated token register
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)           tok <= '0;
    else if (m_tok_valid) tok <= m_tok;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) tok_valid <= 1'b0;
    else        tok_valid <= m_tok_valid;

  // ---------------- VPU ----------------
  logic          v_bypass, ld_avail, ld_pop, rx_avail, rx_pop, st_push, kv_push, tx_push;
  fp16_t [63:0]  ld_data, rx_data, vfu_a, vfu_b, vfu_out, sfv_vec;
  logic          vfu_valid, vfu_out_valid, sfv_start, sfv_accum, sfv_vec_valid, sfv_sc_valid;
  logic [2:0]    vfu_op;
  logic [15:0]   sfv_nvec;
  logic [3:0]    sfv_post;
  fp16_t         sfv_sc;
  vector_operand_collector #(.VDEPTH(VDEPTH), .SDEPTH(SDEPTH)) u_voc (
    .clk, .rst_n, .issue(issue[1]), .ins(iss_instr), .len(iss_len), .busy(unit_busy[1]),
    .bypass_o(v_bypass), .vre(vre[2:1]), .vraddr(vraddr[2:1]), .vrdata(vrdata[2:1]),
    .sre, .sraddr, .srdata(srdata), .ld_avail, .ld_data, .ld_pop, .rx_avail, .rx_data,
    .rx_pop, .st_push, .kv_push, .tx_push, .vfu_valid, .vfu_op, .vfu_a, .vfu_b, .sfv_start,
    .sfv_accum, .sfv_nvec, .sfv_post, .sfv_vec_valid, .sfv_sc_valid, .vwe(vwe[1]),
    .vwaddr(vwaddr[1]), .swe(swe[1]), .swaddr(swaddr[1]));
  assign vwdata[1] = sfv_vec;
  assign swdata[1] = sfv_sc;

  vfu #(.DIM(64)) u_vfu (
    .clk, .rst_n, .in_valid(vfu_valid), .op(vfu_op), .a(vfu_a), .b(vfu_b),
    .out_valid(vfu_out_valid), .out(vfu_out));

  sfu_v #(.DIM(64)) u_sfv (
    .clk, .rst_n, .start(sfv_start), .accum_en(sfv_accum), .n_vec(sfv_nvec),
    .post_mean(sfv_post[0]), .post_eps(sfv_post[1]), .post_recip(sfv_post[2]),
    .post_rsqrt(sfv_post[3]), .inv_emb(cfg.inv_emb), .eps(cfg.eps),
    .in_valid(vfu_out_valid), .in(vfu_out), .vec_valid(sfv_vec_valid), .vec_out(sfv_vec),
    .sc_valid(sfv_sc_valid), .sc(sfv_sc));

  // ---------------- DMA ----------------
  logic transpose;
  dma u_dma (
    .clk, .rst_n, .issue(issue[2]), .ins(iss_instr), .len(iss_len), .busy(unit_busy[2]), .cfg,
    .layer, .token_pos, .gen_tok(tok), .transpose_o(transpose),
    .hbm_rd_req, .hbm_rd_addr, .hbm_rd_ready, .hbm_rd_valid, .hbm_rd_data,
    .hbm_wr_req, .hbm_wr_addr, .hbm_wr_data, .hbm_wr_strb, .hbm_wr_ready,
    .ddr_rd_req, .ddr_rd_addr, .ddr_rd_ready, .ddr_rd_valid, .ddr_rd_data,
    .ddr_wr_req, .ddr_wr_addr, .ddr_wr_data, .ddr_wr_strb, .ddr_wr_ready,
    .w_pop, .w_data, .w_count, .ld_pop, .ld_data, .ld_avail, .st_push, .kv_push,
    .vec_in(sfv_vec));

  // ---------------- router ----------------
  logic synced;
  router #(.FLIT(FLIT)) u_rt (
    .clk, .rst_n, .issue(issue[3]), .len(iss_len), .core_id(cfg.core_id),
    .n_cores(cfg.n_cores), .busy(unit_busy[3]), .sync_o(synced), .tx_push, .tx_data(sfv_vec),
    .rx_avail, .rx_data, .rx_pop, .right_valid, .right_data, .left_valid, .left_data);

  // ---------------- events ----------------
  assign ev = {tok_valid, transpose, synced, sfm_vec_valid && sfm_gelu,
               sfm_vec_valid && sfm_mask, v_bypass, sb_stall, m_stall};
endmodule
