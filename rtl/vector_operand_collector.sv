// vector_operand_collector: sequences one vector instruction onto the vector function unit
// (VFU) and the vector special function unit (SFU_V) behind it.
//
// Instructions (len vectors of 64 elements each, one vector per cycle):
//   VADD/VSUB/VMUL  dst[i] = src1[i] op src2[i]   (or op scalar src2 with F_SCALAR)
//   VEXP            dst[i] = exp(src1[i] - scalar src2)         (softmax numerator)
//   VACCUM          scalar dst = post(sum of all elements of src1..src1+len-1)
//                   post: F_MEAN x 1/emb, F_EPS + eps, F_RECIP 1/x, F_RSQRT 1/sqrt(x)
//   VLOAD           dst[i] = next vector of buffer aux (0 load buffer, 4 router RX)
//   VSTORE          push src1[i] to buffer aux (0 store buffer, 2 key/value, 3 router TX)
// VLOAD and VSTORE pass through the VFU bypass (1 cycle), and everything except VACCUM
// through the SFU_V bypass; bypass_o counts VFU bypass uses. A scalar operand is read from
// the scalar register file once, one cycle before the stream starts, and broadcast.
// One instruction runs at a time and is drained before the next one is accepted, so the
// different VFU latencies (1..15 cycles) can never collide at the write port.
// Lint notes: only the low 16 bits of the address fields and the fields named above are
// used from the latched instruction word.
module vector_operand_collector
  import dfx_pkg::*;
#(
  parameter int unsigned VDEPTH = 512,
  parameter int unsigned SDEPTH = 64
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         issue,
  input  instr_t                       ins,
  input  logic [15:0]                  len,
  output logic                         busy,
  output logic                         bypass_o,
  // register reads (two vector ports, one scalar port)
  output logic [1:0]                   vre,
  output logic [1:0][$clog2(VDEPTH)-1:0] vraddr,
  input  fp16_t [1:0][63:0]            vrdata,
  output logic                         sre,
  output logic [$clog2(SDEPTH)-1:0]    sraddr,
  input  fp16_t                        srdata,
  // buffers
  input  logic                         ld_avail,
  input  fp16_t [63:0]                 ld_data,
  output logic                         ld_pop,
  input  logic                         rx_avail,
  input  fp16_t [63:0]                 rx_data,
  output logic                         rx_pop,
  output logic                         st_push,
  output logic                         kv_push,
  output logic                         tx_push,
  // VFU
  output logic                         vfu_valid,
  output logic [2:0]                   vfu_op,
  output fp16_t [63:0]                 vfu_a,
  output fp16_t [63:0]                 vfu_b,
  // SFU_V control and outputs
  output logic                         sfv_start,
  output logic                         sfv_accum,
  output logic [15:0]                  sfv_nvec,
  output logic [3:0]                   sfv_post,   // mean, eps, recip, rsqrt
  input  logic                         sfv_vec_valid,
  input  logic                         sfv_sc_valid,
  // writes
  output logic                         vwe,
  output logic [$clog2(VDEPTH)-1:0]    vwaddr,
  output logic                         swe,
  output logic [$clog2(SDEPTH)-1:0]    swaddr
);
  typedef enum logic [1:0] {V_IDLE, V_SCALAR, V_STREAM, V_DRAIN} vst_e;
  vst_e st;
  instr_t      ci;
  logic [15:0] clen, rcnt, wcnt;
  logic        rd_q, sc_done;
  fp16_t       sc_q;
  logic        is_ld, is_st, is_acc, src_buf, src_rx;
  fp16_t [63:0] ld_q;

  assign is_ld   = (ci.op == OP_VLOAD);
  assign is_st   = (ci.op == OP_VSTORE);
  assign is_acc  = (ci.op == OP_VACCUM);
  assign src_rx  = (ci.aux[2:0] == 3'(BUF_RX));
  assign src_buf = is_ld && (src_rx ? rx_avail : ld_avail);

  // one element per cycle while streaming; VLOAD waits for its buffer
  logic rd_now;
  assign rd_now  = (st == V_STREAM) && (rcnt != clen) && (!is_ld || src_buf);
  assign vre[0]  = rd_now && !is_ld;
  assign vre[1]  = rd_now && !is_ld && !is_st && !is_acc && !ci.flags[F_SCALAR] &&
                   (ci.op != OP_VEXP);
  assign vraddr[0] = $clog2(VDEPTH)'(ci.src1[15:0] + rcnt);
  assign vraddr[1] = $clog2(VDEPTH)'(ci.src2[15:0] + rcnt);
  assign ld_pop  = rd_now && is_ld && !src_rx;
  assign rx_pop  = rd_now && is_ld && src_rx;
  assign sre     = (st == V_SCALAR);
  assign sraddr  = $clog2(SDEPTH)'(ci.src2[15:0]);

  always_comb begin
    case (ci.op)
      OP_VADD: vfu_op = 3'd0;
      OP_VSUB: vfu_op = 3'd1;
      OP_VMUL: vfu_op = 3'd2;
      OP_VEXP: vfu_op = 3'd3;
      default: vfu_op = 3'd4;
    endcase
  end
  assign vfu_valid = rd_q;
  assign vfu_a     = is_ld ? ld_q : vrdata[0];
  always_comb begin
    for (int i = 0; i < 64; i++)
      vfu_b[i] = (ci.flags[F_SCALAR] || ci.op == OP_VEXP) ? sc_q : vrdata[1][i];
  end
  assign bypass_o = vfu_valid && (vfu_op == 3'd4);

  assign sfv_accum = is_acc;
  assign sfv_nvec  = clen;
  assign sfv_post  = {ci.flags[F_RSQRT], ci.flags[F_RECIP], ci.flags[F_EPS], ci.flags[F_MEAN]};

  assign vwe     = sfv_vec_valid && !is_st;
  assign vwaddr  = $clog2(VDEPTH)'(ci.dst[15:0] + wcnt);
  assign st_push = sfv_vec_valid && is_st && (ci.aux[2:0] == 3'(BUF_LOAD));
  assign kv_push = sfv_vec_valid && is_st && (ci.aux[2:0] == 3'(BUF_KV));
  assign tx_push = sfv_vec_valid && is_st && (ci.aux[2:0] == 3'(BUF_TX));
  assign swe     = sfv_sc_valid;
  assign swaddr  = $clog2(SDEPTH)'(ci.dst[15:0]);

  assign busy = (st != V_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= V_IDLE;
      ci        <= '0;
      clen      <= '0;
      rcnt      <= '0;
      wcnt      <= '0;
      rd_q      <= 1'b0;
      sc_q      <= '0;
      sc_done   <= 1'b0;
      ld_q      <= '0;
      sfv_start <= 1'b0;
    end else begin
      sfv_start <= 1'b0;
      rd_q      <= rd_now;
      if (rd_now && is_ld) ld_q <= src_rx ? rx_data : ld_data;
      if (rd_now) rcnt <= rcnt + 16'd1;
      if (sfv_vec_valid) wcnt <= wcnt + 16'd1;
      if (sfv_sc_valid) sc_done <= 1'b1;
      case (st)
        V_IDLE: if (issue) begin
          ci        <= ins;
          clen      <= len;
          rcnt      <= '0;
          wcnt      <= '0;
          sc_done   <= 1'b0;
          sfv_start <= 1'b1;
          st        <= (ins.flags[F_SCALAR] || ins.op == OP_VEXP) ? V_SCALAR : V_STREAM;
        end
        V_SCALAR: st <= V_STREAM;
        V_STREAM: begin
          // the scalar operand arrives one cycle after the V_SCALAR read
          if (rcnt == 16'd0) sc_q <= srdata;
          if (rcnt == clen) st <= V_DRAIN;
        end
        V_DRAIN: if (is_acc ? (sc_done || sfv_sc_valid) : (wcnt == clen)) st <= V_IDLE;
        default: st <= V_IDLE;
      endcase
    end
  end
endmodule
