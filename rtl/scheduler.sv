// scheduler: fetches the instructions of one program section and dispatches them.
//
// On sec_start the scheduler fetches from sec_pc onward. Each instruction goes to the unit of
// its type: matrix compute -> matrix operand collector (MPU), vector compute -> vector operand
// collector (VPU), dma -> DMA, router -> router. Every unit runs one instruction at a time and
// reports busy; the scheduler keeps, per unit, the state "idle / running" through those busy
// lines, and an instruction issues only when its unit is idle and the scoreboard finds no
// overlap with running instructions. Different units therefore run in parallel (compute,
// dma fetch and router synchronization overlap, as the paper describes), while issue stays in
// program order. An OP_C_END instruction ends the section: sec_done pulses once all units are
// idle again.
//
// The scheduler also resolves lengths that depend on the token position: with F_TS_IN/F_TS_OUT
// a length field counts 64-token tiles and is multiplied by ceil((t+1)/64) (attention over all
// tokens seen so far). Fetch takes one cycle, so at most one instruction issues every two
// cycles. DMA instructions that use the generated token (D_EMB, D_STTOK) also wait until
// the MPU, which produces it, is idle.
module scheduler
  import dfx_pkg::*;
#(
  parameter int unsigned IB_DEPTH = 1024
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        sec_start,
  input  logic [11:0]                 sec_pc,
  output logic                        sec_done,
  input  logic [15:0]                 token_pos,
  // instruction buffer
  output logic                        ib_re,
  output logic [$clog2(IB_DEPTH)-1:0] ib_raddr,
  input  instr_t                      ib_rdata,
  // units: 0 MPU, 1 VPU, 2 DMA, 3 router
  input  logic [3:0]                  unit_busy,
  output logic [3:0]                  issue,
  output instr_t                      iss_instr,
  output logic [15:0]                 iss_len,     // effective len
  output logic [15:0]                 iss_nout,    // effective output count (matrix)
  // scoreboard
  output logic [2:0]                  sb_src_en,
  output logic [2:0][15:0]            sb_src_base,
  output logic [2:0][15:0]            sb_src_len,
  output logic [1:0]                  sb_dst_en,
  output logic [15:0]                 sb_dst_base,
  output logic [15:0]                 sb_dst_len,
  output logic [15:0]                 sb_sdst,
  input  logic                        sb_hazard,
  output logic                        sb_issue,
  output logic [1:0]                  sb_unit,
  output logic                        hazard_stall  // decoded instruction held by a hazard
);
  typedef enum logic [1:0] {S_IDLE, S_FETCH, S_DECODE, S_END} sst_e;
  sst_e st;
  logic [11:0] pc;

  instr_t      ins;
  logic [15:0] tiles;
  logic [1:0]  unit;
  logic        is_mat;
  assign ins    = ib_rdata;
  assign tiles  = token_tiles(token_pos);
  assign is_mat = (ins.itype == IT_COMPUTE) && (ins.op == OP_CONV1D || ins.op == OP_MM ||
                                                ins.op == OP_MASKED_MM);
  always_comb begin
    case (ins.itype)
      IT_COMPUTE: unit = is_mat ? 2'd0 : 2'd1;
      IT_DMA:     unit = 2'd2;
      default:    unit = 2'd3;
    endcase
  end
  assign iss_len  = ins.flags[F_TS_IN]  ? 16'(ins.len * tiles) : ins.len;
  assign iss_nout = ins.flags[F_TS_OUT] ? 16'(ins.aux * tiles) : ins.aux;
  assign iss_instr = ins;

  // operand ranges for the scoreboard
  always_comb begin
    sb_src_en   = '0;
    sb_src_base = '0;
    sb_src_len  = '0;
    sb_dst_en   = '0;
    sb_dst_base = ins.dst[15:0];
    sb_dst_len  = iss_len;
    sb_sdst     = ins.dst[15:0];
    if (ins.itype == IT_COMPUTE) begin
      if (is_mat) begin
        sb_src_en[0]   = 1'b1;
        sb_src_base[0] = ins.src1[15:0];
        sb_src_len[0]  = iss_len;
        sb_dst_en[0]   = 1'b1;
        sb_dst_len     = iss_nout;
        sb_dst_en[1]   = ins.flags[F_MAX];
        sb_sdst        = ins.src2[15:0];
      end else begin
        case (ins.op)
          OP_VADD, OP_VSUB, OP_VMUL, OP_VEXP: begin
            sb_src_en[0]   = 1'b1;
            sb_src_base[0] = ins.src1[15:0];
            sb_src_len[0]  = iss_len;
            if (ins.flags[F_SCALAR]) begin
              sb_src_en[2]   = 1'b1;
              sb_src_base[2] = ins.src2[15:0];
            end else begin
              sb_src_en[1]   = 1'b1;
              sb_src_base[1] = ins.src2[15:0];
              sb_src_len[1]  = iss_len;
            end
            sb_dst_en[0] = 1'b1;
          end
          OP_VACCUM: begin
            sb_src_en[0]   = 1'b1;
            sb_src_base[0] = ins.src1[15:0];
            sb_src_len[0]  = iss_len;
            sb_dst_en[1]   = 1'b1;
          end
          OP_VLOAD:  sb_dst_en[0] = 1'b1;
          OP_VSTORE: begin
            sb_src_en[0]   = 1'b1;
            sb_src_base[0] = ins.src1[15:0];
            sb_src_len[0]  = iss_len;
          end
          default: ;
        endcase
      end
    end
  end

  logic can_issue;
  // DMA instructions that read the generated token wait for the MPU to finish its arg-max
  logic tok_dep;
  assign tok_dep   = (ins.itype == IT_DMA) && (ins.op == OP_D_STTOK || ins.op == OP_D_EMB) &&
                     unit_busy[0];
  assign can_issue = (st == S_DECODE) && (ins.itype != IT_CTRL) && !unit_busy[unit] &&
                     !sb_hazard && !tok_dep;
  assign sb_issue  = can_issue;
  assign hazard_stall = (st == S_DECODE) && (ins.itype != IT_CTRL) && sb_hazard;
  assign sb_unit   = unit;
  always_comb begin
    issue = '0;
    if (can_issue) issue[unit] = 1'b1;
  end
  assign ib_re    = (st == S_FETCH);
  assign ib_raddr = pc[$clog2(IB_DEPTH)-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      pc       <= '0;
      sec_done <= 1'b0;
    end else begin
      sec_done <= 1'b0;
      case (st)
        S_IDLE: if (sec_start) begin
          pc <= sec_pc;
          st <= S_FETCH;
        end
        S_FETCH: st <= S_DECODE;
        S_DECODE: begin
          if (ins.itype == IT_CTRL) st <= S_END;
          else if (can_issue) begin
            pc <= pc + 12'd1;
            st <= S_FETCH;
          end
        end
        S_END: if (unit_busy == 4'b0000) begin
          sec_done <= 1'b1;
          st       <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
