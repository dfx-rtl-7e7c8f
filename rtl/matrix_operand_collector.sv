// matrix_operand_collector: sequences one matrix instruction (CONV1D / MM / MASKED_MM) onto the
// matrix function unit and collects its results.
//
// A matrix instruction multiplies len input vectors (the 64-wide chunks of an input of len*64
// elements, read from the vector register file at src1..src1+len-1) by a weight matrix that the
// DMA streams in as d x l = 64 x 16 tiles (one HBM beat per tile) through the weight FIFO. The
// output has nout*64 elements; for every output group of 64 the collector walks the input
// chunks k = 0..len-1 and, per chunk, issues four 16-column tiles (slots 0..3) in four
// consecutive cycles: one tile per cycle, one vector register read per chunk. The accumulate
// adder of each lane takes 11 cycles, so the same slot may return only 12 cycles later; the
// next chunk therefore starts 12 cycles after the previous one (the tile order is the
// paper's zigzag over the d x d block: down the four column tiles, then to the next row).
// Before a chunk is started four tiles must be waiting in the weight FIFO, otherwise the
// collector stalls (counted on stall_o). first/last mark the first and last chunk so the
// MFU loads the bias (zero here, bias is added by the VPU) and emits the sums.
//
// Results leave the SFU_M as 64-wide vectors and are written to dst, dst+1, ...; with F_MAX the
// reduce-max result is also written to the scalar register src2, and with F_ARGMAX the arg-max
// index is reported on tok_valid/tok (the generated token). busy stays high until every output
// (and the reduction) has been written.
// Lint notes: the instruction register keeps the whole word, but only the fields above are
// used here (type, len and the unused address bits are intentionally ignored).
module matrix_operand_collector
  import dfx_pkg::*;
#(
  parameter int unsigned VDEPTH  = 512,
  parameter int unsigned SDEPTH  = 64,
  parameter int unsigned ACC_GAP = 12
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      issue,
  input  instr_t                    ins,
  input  logic [15:0]               len,
  input  logic [15:0]               nout,
  output logic                      busy,
  output logic                      stall_o,
  // vector register read
  output logic                      vre,
  output logic [$clog2(VDEPTH)-1:0] vraddr,
  // weight FIFO
  input  logic [5:0]                w_count,
  output logic                      w_pop,
  // MFU control
  output logic                      mfu_valid,
  output logic                      mfu_first,
  output logic                      mfu_last,
  output logic [1:0]                mfu_slot,
  // SFU_M control and results
  output logic                      sfm_start,
  output logic                      sfm_gelu,
  output logic                      sfm_scale,
  output logic                      sfm_mask,
  output logic [15:0]               sfm_groups,
  input  logic                      sfm_vec_valid,
  input  logic                      sfm_red_valid,
  input  fp16_t                     sfm_red_max,
  input  logic [15:0]               sfm_red_idx,
  // writes
  output logic                      vwe,
  output logic [$clog2(VDEPTH)-1:0] vwaddr,
  output logic                      swe,
  output logic [$clog2(SDEPTH)-1:0] swaddr,
  output fp16_t                     swdata,
  output logic                      tok_valid,
  output logic [15:0]               tok
);
  typedef enum logic [1:0] {M_IDLE, M_READ, M_ISSUE, M_GAP} mst_e;
  mst_e st;
  instr_t      ci;
  logic [15:0] clen, cnout, g, k, wcnt;
  logic [3:0]  cyc;
  logic        red_pend;

  assign sfm_groups = 16'(cnout * 4);
  assign sfm_gelu   = ci.flags[F_GELU];
  assign sfm_scale  = ci.flags[F_SCALE];
  assign sfm_mask   = (ci.op == OP_MASKED_MM);
  assign busy       = (st != M_IDLE) || (wcnt != cnout) || red_pend;

  assign vre       = (st == M_READ) && (w_count >= 6'd4);
  assign vraddr    = $clog2(VDEPTH)'(ci.src1[15:0] + k);
  assign stall_o   = (st == M_READ) && (w_count < 6'd4);
  assign mfu_valid = (st == M_ISSUE);
  assign w_pop     = (st == M_ISSUE);
  assign mfu_slot  = cyc[1:0];
  assign mfu_first = (k == 16'd0);
  assign mfu_last  = (k == clen - 16'd1);

  assign vwe    = sfm_vec_valid;
  assign vwaddr = $clog2(VDEPTH)'(ci.dst[15:0] + wcnt);
  assign swe    = sfm_red_valid && ci.flags[F_MAX];
  assign swaddr = $clog2(SDEPTH)'(ci.src2[15:0]);
  assign swdata = sfm_red_max;
  assign tok_valid = sfm_red_valid && ci.flags[F_ARGMAX];
  assign tok       = sfm_red_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= M_IDLE;
      ci        <= '0;
      clen      <= '0;
      cnout     <= '0;
      g         <= '0;
      k         <= '0;
      cyc       <= '0;
      wcnt      <= '0;
      red_pend  <= 1'b0;
      sfm_start <= 1'b0;
    end else begin
      sfm_start <= 1'b0;
      if (sfm_vec_valid) wcnt <= wcnt + 16'd1;
      if (sfm_red_valid) red_pend <= 1'b0;
      case (st)
        M_IDLE: if (issue) begin
          ci        <= ins;
          clen      <= len;
          cnout     <= nout;
          g         <= '0;
          k         <= '0;
          wcnt      <= '0;
          red_pend  <= ins.flags[F_MAX] || ins.flags[F_ARGMAX];
          sfm_start <= 1'b1;
          st        <= M_READ;
        end
        M_READ: if (w_count >= 6'd4) begin
          cyc <= '0;
          st  <= M_ISSUE;
        end
        M_ISSUE: begin
          cyc <= cyc + 4'd1;
          if (cyc == 4'd3) st <= M_GAP;
        end
        M_GAP: begin
          cyc <= cyc + 4'd1;
          if (cyc == 4'(ACC_GAP - 2)) begin
            if (k == clen - 16'd1) begin
              k <= '0;
              if (g == cnout - 16'd1) st <= M_IDLE;
              else begin
                g  <= g + 16'd1;
                st <= M_READ;
              end
            end else begin
              k  <= k + 16'd1;
              st <= M_READ;
            end
          end
        end
        default: st <= M_IDLE;
      endcase
    end
  end
endmodule
