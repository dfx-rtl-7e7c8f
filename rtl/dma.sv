// dma: moves data between the off-chip memories and the on-chip buffers of one core.
//
// Memory side (one request per cycle, in-order responses):
//   HBM  - read and write in beats of 16 x 64 fp16 (32 channels x 512 bit), i.e. one d x l
//          weight tile per beat; writes carry one strobe per element.
//   DDR  - read and write in 512-bit words (32 fp16); writes carry byte strobes.
// Buffer side: the weight FIFO (to the matrix operand collector), the load buffer (bias,
// parameter vectors and embeddings, read by VLOAD), the store buffer and the key/value buffer
// (filled by VSTORE), and the token input (arg-max of the LM head).
//
// Instructions (one at a time; src/dst are word or beat addresses, F_LAYER adds
// layer * stride of the memory):
//   D_WEIGHT  HBM beats src..src+len-1 -> weight FIFO. Reads are issued only while the FIFO
//             has room for them (count + outstanding < depth), so the DMA prefetches ahead of
//             the matrix unit and stops when it is full.
//   D_BIAS, D_LDVEC  DDR words -> load buffer, two words per 64-element vector.
//   D_STVEC   store buffer -> DDR, two words per vector.
//   D_EMB     token (or position with F_WPE) embedding row -> load buffer, len vectors from
//             src + row*emb_words. The token of position t is the t-th input token while
//             t < n_in (read from the DDR input list, 32 tokens per word), otherwise the last
//             generated token.
//   D_STK     key vector of token t -> lane t%16 of HBM beat dst + t/16 (keys laid out as
//             the weight tiles of Q x K^T).
//   D_STV     value vector of token t, transposed: element c*16+j goes to row t%64 of lane j
//             of beat dst + (t/64)*4 + c, so V is read as the weight tiles of S x V. This is
//             the transpose unit.
//   D_STTOK   generated token -> 16-bit lane of the DDR output list.
// Lint notes: the full/count outputs of the internal FIFOs are unused because the request
// logic bounds their fill level itself; only the configuration fields named above are used.
module dma
  import dfx_pkg::*;
#(
  parameter int unsigned WFIFO_D = 32,
  parameter int unsigned LFIFO_D = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                issue,
  input  instr_t              ins,
  input  logic [15:0]         len,
  output logic                busy,
  input  cfg_t                cfg,
  input  logic [7:0]          layer,
  input  logic [15:0]         token_pos,
  input  logic [15:0]         gen_tok,
  output logic                transpose_o,
  // HBM
  output logic                hbm_rd_req,
  output logic [31:0]         hbm_rd_addr,
  input  logic                hbm_rd_ready,
  input  logic                hbm_rd_valid,
  input  fp16_t [15:0][63:0]  hbm_rd_data,
  output logic                hbm_wr_req,
  output logic [31:0]         hbm_wr_addr,
  output fp16_t [15:0][63:0]  hbm_wr_data,
  output logic [15:0][63:0]   hbm_wr_strb,
  input  logic                hbm_wr_ready,
  // DDR
  output logic                ddr_rd_req,
  output logic [31:0]         ddr_rd_addr,
  input  logic                ddr_rd_ready,
  input  logic                ddr_rd_valid,
  input  fp16_t [31:0]        ddr_rd_data,
  output logic                ddr_wr_req,
  output logic [31:0]         ddr_wr_addr,
  output fp16_t [31:0]        ddr_wr_data,
  output logic [63:0]         ddr_wr_strb,
  input  logic                ddr_wr_ready,
  // weight FIFO
  input  logic                w_pop,
  output fp16_t [15:0][63:0]  w_data,
  output logic [$clog2(WFIFO_D+1)-1:0] w_count,
  // load buffer
  input  logic                ld_pop,
  output fp16_t [63:0]        ld_data,
  output logic                ld_avail,
  // store and key/value buffers
  input  logic                st_push,
  input  logic                kv_push,
  input  fp16_t [63:0]        vec_in
);
  typedef enum logic [2:0] {D_IDLE, D_TOKRD, D_TOKWAIT, D_RUN} dst_e;
  dst_e st;
  instr_t      ci;
  logic [15:0] clen, nreq, nresp, tokv;
  logic [31:0] base;
  logic [6:0]  outst;

  logic is_w, is_ld, is_emb, is_stv, is_stk, is_stt, is_stvec;
  assign is_w     = (ci.op == OP_D_WEIGHT);
  assign is_ld    = (ci.op == OP_D_BIAS) || (ci.op == OP_D_LDVEC);
  assign is_emb   = (ci.op == OP_D_EMB);
  assign is_stvec = (ci.op == OP_D_STVEC);
  assign is_stk   = (ci.op == OP_D_STK);
  assign is_stv   = (ci.op == OP_D_STV);
  assign is_stt   = (ci.op == OP_D_STTOK);

  // ---------------- buffers ----------------
  logic                           wf_empty, wf_full;
  sync_fifo #(.W(16*64*16), .DEPTH(WFIFO_D)) u_wfifo (
    .clk, .rst_n, .clear(1'b0), .push(hbm_rd_valid && is_w), .din(hbm_rd_data),
    .pop(w_pop), .dout(w_data), .empty(wf_empty), .full(wf_full), .count(w_count));

  logic                           lf_empty, lf_full;
  logic [$clog2(LFIFO_D+1)-1:0]   lf_count;
  logic                           lo_half;
  fp16_t [31:0]                   lo_q;
  sync_fifo #(.W(64*16), .DEPTH(LFIFO_D)) u_lfifo (
    .clk, .rst_n, .clear(1'b0), .push(ddr_rd_valid && lo_half && st == D_RUN),
    .din({ddr_rd_data, lo_q}), .pop(ld_pop), .dout(ld_data), .empty(lf_empty),
    .full(lf_full), .count(lf_count));
  assign ld_avail = !lf_empty;

  logic                           sf_empty, sf_full, kf_empty, kf_full;
  logic [$clog2(17)-1:0]          sf_count, kf_count;
  fp16_t [63:0]                   sf_dout, kf_dout;
  logic                           sf_pop, kf_pop;
  sync_fifo #(.W(64*16), .DEPTH(16)) u_sfifo (
    .clk, .rst_n, .clear(1'b0), .push(st_push), .din(vec_in), .pop(sf_pop),
    .dout(sf_dout), .empty(sf_empty), .full(sf_full), .count(sf_count));
  sync_fifo #(.W(64*16), .DEPTH(16)) u_kfifo (
    .clk, .rst_n, .clear(1'b0), .push(kv_push), .din(vec_in), .pop(kf_pop),
    .dout(kf_dout), .empty(kf_empty), .full(kf_full), .count(kf_count));

  // ---------------- request generation ----------------
  logic [15:0] nwords;      // requests (reads or writes) of the instruction
  always_comb begin
    if (is_w)                       nwords = clen;
    else if (is_ld || is_emb || is_stvec) nwords = 16'(clen * 2);
    else if (is_stv)                nwords = 16'd4;
    else                            nwords = 16'd1;
  end
  logic rd_room;
  assign rd_room = is_w ? (32'(w_count) + 32'(outst) < WFIFO_D)
                        : (32'(lf_count) * 2 + 32'(outst) + 2 < LFIFO_D * 2);
  logic do_rd, do_wr, wr_src_ok;
  assign wr_src_ok = is_stvec ? !sf_empty : (is_stk || is_stv) ? !kf_empty : 1'b1;
  assign do_rd = (st == D_RUN) && (is_w || is_ld || is_emb) && (nreq != nwords) && rd_room;
  assign do_wr = (st == D_RUN) && (is_stvec || is_stk || is_stv || is_stt) &&
                 (nreq != nwords) && wr_src_ok;

  assign hbm_rd_req  = do_rd && is_w;
  assign hbm_rd_addr = base + 32'(nreq);
  assign ddr_rd_req  = (do_rd && !is_w) || (st == D_TOKRD);
  assign ddr_rd_addr = (st == D_TOKRD) ? cfg.in_tok_addr + 32'(token_pos >> 5)
                                       : base + 32'(nreq);
  logic rd_fire, wr_fire;
  assign rd_fire = (hbm_rd_req && hbm_rd_ready) || (do_rd && !is_w && ddr_rd_ready);

  // writes
  logic [15:0] tloc;
  assign tloc = token_pos - (cfg.n_in - 16'd1);
  always_comb begin
    hbm_wr_req  = 1'b0;
    hbm_wr_addr = '0;
    for (int j = 0; j < 16; j++) hbm_wr_data[j] = '0;
    hbm_wr_strb = '0;
    ddr_wr_req  = 1'b0;
    ddr_wr_addr = '0;
    ddr_wr_data = '0;
    ddr_wr_strb = '0;
    if (do_wr) begin
      if (is_stk) begin
        hbm_wr_req  = 1'b1;
        hbm_wr_addr = base + 32'(token_pos >> 4);
        hbm_wr_data[token_pos[3:0]] = kf_dout;
        hbm_wr_strb[token_pos[3:0]] = '1;
      end else if (is_stv) begin
        hbm_wr_req  = 1'b1;
        hbm_wr_addr = base + 32'(token_pos >> 6) * 4 + 32'(nreq);
        for (int j = 0; j < 16; j++) begin
          hbm_wr_data[j][token_pos[5:0]] = kf_dout[nreq[1:0]*16 + j];
          hbm_wr_strb[j][token_pos[5:0]] = 1'b1;
        end
      end else if (is_stvec) begin
        ddr_wr_req  = 1'b1;
        ddr_wr_addr = base + 32'(nreq);
        ddr_wr_data = nreq[0] ? sf_dout[63:32] : sf_dout[31:0];
        ddr_wr_strb = '1;
      end else begin
        ddr_wr_req  = 1'b1;
        ddr_wr_addr = cfg.out_tok_addr + 32'(tloc >> 5);
        ddr_wr_data[tloc[4:0]] = gen_tok;
        ddr_wr_strb[tloc[4:0]*2 +: 2] = 2'b11;
      end
    end
  end
  assign wr_fire = (hbm_wr_req && hbm_wr_ready) || (ddr_wr_req && ddr_wr_ready);
  assign sf_pop  = wr_fire && is_stvec && nreq[0];
  assign kf_pop  = wr_fire && ((is_stk) || (is_stv && nreq == 16'd3));
  assign transpose_o = wr_fire && is_stv;

  logic rsp;
  assign rsp = (st == D_RUN) && ((is_w && hbm_rd_valid) || (!is_w && ddr_rd_valid));
  assign busy = (st != D_IDLE);

  // base address of the instruction
  logic [31:0] ins_base, emb_row;
  always_comb begin
    ins_base = (ins.op == OP_D_STVEC || ins.op == OP_D_STK || ins.op == OP_D_STV) ?
               32'(ins.dst) : 32'(ins.src1);
    if (ins.flags[F_LAYER])
      ins_base = ins_base + 32'(layer) *
                 ((ins.op == OP_D_WEIGHT || ins.op == OP_D_STK || ins.op == OP_D_STV) ?
                  cfg.hbm_layer_stride : cfg.ddr_layer_stride);
  end
  assign emb_row = ci.flags[F_WPE] ? 32'(token_pos) : 32'(gen_tok);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= D_IDLE;
      ci    <= '0;
      clen  <= '0;
      nreq  <= '0;
      nresp <= '0;
      base  <= '0;
      outst <= '0;
      tokv  <= '0;
      lo_half <= 1'b0;
      lo_q  <= '0;
    end else begin
      if (rd_fire || wr_fire) nreq <= nreq + 16'd1;
      if (rsp) begin
        nresp <= nresp + 16'd1;
        if (!is_w) begin
          lo_half <= !lo_half;
          lo_q    <= ddr_rd_data;
        end
      end
      outst <= outst + 7'(rd_fire) - 7'(rsp);
      case (st)
        D_IDLE: if (issue) begin
          ci      <= ins;
          clen    <= len;
          nreq    <= '0;
          nresp   <= '0;
          lo_half <= 1'b0;
          base    <= ins_base;
          if (ins.op == OP_D_EMB)
            st <= (!ins.flags[F_WPE] && token_pos < cfg.n_in) ? D_TOKRD : D_TOKWAIT;
          else st <= D_RUN;
        end
        D_TOKRD: if (ddr_rd_ready) st <= D_TOKWAIT;
        D_TOKWAIT: begin
          // add the row offset: input token from DDR, generated token, or the position
          if (!ci.flags[F_WPE] && token_pos < cfg.n_in) begin
            if (ddr_rd_valid) begin
              tokv <= ddr_rd_data[token_pos[4:0]];
              base <= base + 32'(ddr_rd_data[token_pos[4:0]]) * 32'(cfg.emb_words);
              st   <= D_RUN;
            end
          end else begin
            tokv <= gen_tok;
            base <= base + emb_row * 32'(cfg.emb_words);
            st   <= D_RUN;
          end
        end
        D_RUN: begin
          if (is_w || is_ld || is_emb) begin
            if (nresp == nwords) st <= D_IDLE;
          end else if (nreq == nwords) st <= D_IDLE;
        end
        default: st <= D_IDLE;
      endcase
    end
  end
endmodule
