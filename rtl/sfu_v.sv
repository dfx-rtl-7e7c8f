// sfu_v: special function unit behind the VFU (SFU_V, Fig. 11(b)).
//
// Two paths leave it:
//   * vector bypass - the VFU's DIM-element result passes straight through to vec_out
//     (element-wise instructions, load and store);
//   * scalar path   - for accumulate instructions, an adder tree sums each incoming vector
//     (log2(DIM) levels of 11-cycle FP16 adders), a scalar FP16 adder accumulates the n_vec
//     vector sums of the instruction, and the total then passes optional post stages, in the
//     order the paper lists them: multiply by 1/emb (mean; the paper divides by the embedding
//     size with a multiplier), add a constant (epsilon), then reciprocal or reciprocal square
//     root. The scalar result leaves on sc_valid/sc.
// The scalar accumulator is a loop through one 11-cycle adder: tree sums wait in a small FIFO
// and are added one at a time (this design's way to close the loop; the paper does not say).
// accum_en, the post flags and n_vec must be stable from start until sc_valid.
module sfu_v
  import dfx_pkg::*;
#(
  parameter int unsigned DIM     = 64,
  parameter int unsigned ADD_LAT = 11,
  parameter int unsigned FIFO_D  = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            accum_en,
  input  logic [15:0]     n_vec,
  input  logic            post_mean,
  input  logic            post_eps,
  input  logic            post_recip,
  input  logic            post_rsqrt,
  input  fp16_t           inv_emb,
  input  fp16_t           eps,
  input  logic            in_valid,
  input  fp16_t [DIM-1:0] in,
  output logic            vec_valid,
  output fp16_t [DIM-1:0] vec_out,
  output logic            sc_valid,
  output fp16_t           sc
);
  // ------------------------------------------------------------ vector bypass
  assign vec_valid = in_valid && !accum_en;
  assign vec_out   = in;

  // ------------------------------------------------------------ adder tree
  logic  tv;
  fp16_t ts;
  fp16_adder_tree #(.N(DIM), .ADD_LAT(ADD_LAT)) u_tree (
    .clk, .rst_n, .in_valid(in_valid && accum_en), .in, .out_valid(tv), .sum(ts));

  // FIFO of vector sums
  localparam int unsigned AW = $clog2(FIFO_D);
  fp16_t       fifo [FIFO_D];
  logic [AW:0] wp, rp;
  logic        pop;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (start) begin
        wp <= '0;
        rp <= '0;
      end else begin
        if (tv) begin
          fifo[wp[AW-1:0]] <= ts;
          wp <= wp + 1'b1;
        end
        if (pop) rp <= rp + 1'b1;
      end
    end
  end

  // ------------------------------------------------------------ scalar accumulate + post
  typedef enum logic [2:0] {S_IDLE, S_ACC, S_WAIT, S_MUL, S_ADD, S_RCP, S_DONE} st_e;
  st_e         st;
  fp16_t       acc;
  logic [15:0] cnt;
  logic        add_go, add_v, mul_go, mul_v, rcp_go, rcp_v;
  fp16_t       add_a, add_b, add_y, mul_y, rcp_y;
  assign pop = (st == S_ACC) && (wp != rp);

  fp16_add #(.LAT(ADD_LAT)) u_add (.clk, .rst_n, .in_valid(add_go), .sub(1'b0), .a(add_a),
                                   .b(add_b), .out_valid(add_v), .y(add_y));
  fp16_mul u_mul (.clk, .rst_n, .in_valid(mul_go), .a(acc), .b(inv_emb), .out_valid(mul_v),
                  .y(mul_y));
  fp16_rcp u_rcp (.clk, .rst_n, .in_valid(rcp_go), .rsqrt(post_rsqrt), .a(acc),
                  .out_valid(rcp_v), .y(rcp_y));

  always_comb begin
    add_go = 1'b0;
    add_a  = acc;
    add_b  = fifo[rp[AW-1:0]];
    if (pop) add_go = 1'b1;
    else if (st == S_ADD && cnt == 0) begin
      add_go = 1'b1;
      add_b  = eps;
    end
  end
  assign mul_go = (st == S_MUL) && (cnt == 0);
  assign rcp_go = (st == S_RCP) && (cnt == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      acc      <= FP16_ZERO;
      cnt      <= '0;
      sc_valid <= 1'b0;
      sc       <= FP16_ZERO;
    end else begin
      sc_valid <= 1'b0;
      if (start) begin
        st  <= accum_en ? S_ACC : S_IDLE;
        acc <= FP16_ZERO;
        cnt <= n_vec;
      end else begin
        case (st)
          S_ACC: if (pop) st <= S_WAIT;
          S_WAIT: if (add_v) begin
            acc <= add_y;
            if (cnt > 16'd1) begin
              cnt <= cnt - 16'd1;
              st  <= S_ACC;
            end else begin
              cnt <= '0;
              st  <= post_mean ? S_MUL : post_eps ? S_ADD : (post_recip | post_rsqrt) ? S_RCP : S_DONE;
            end
          end
          S_MUL: begin
            cnt <= 16'd1;
            if (mul_v) begin
              acc <= mul_y;
              cnt <= '0;
              st  <= post_eps ? S_ADD : (post_recip | post_rsqrt) ? S_RCP : S_DONE;
            end
          end
          S_ADD: begin
            cnt <= 16'd1;
            if (add_v) begin
              acc <= add_y;
              cnt <= '0;
              st  <= (post_recip | post_rsqrt) ? S_RCP : S_DONE;
            end
          end
          S_RCP: begin
            cnt <= 16'd1;
            if (rcp_v) begin
              acc <= rcp_y;
              cnt <= '0;
              st  <= S_DONE;
            end
          end
          S_DONE: begin
            sc_valid <= 1'b1;
            sc       <= acc;
            st       <= S_IDLE;
          end
          default: ;
        endcase
      end
    end
  end
endmodule
