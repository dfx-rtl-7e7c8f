// reduce_max: max or argmax over a stream of N-element FP16 groups, the SFU_M's reduce-max
// unit. Within a group a parallel tree of comparators finds the largest element and its
// position; a running register keeps the best value and index over successive groups. clear
// starts a new reduction; base gives the index of element 0 of the current group, so the
// argmax is an absolute column index (the token ID when it runs over LM-head logits).
// Result: max_q / idx_q, updated one cycle after each valid group. Ties keep the lower index.
module reduce_max
  import dfx_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic            in_valid,
  input  fp16_t [N-1:0]   vals,
  input  logic [15:0]     base,
  output fp16_t           max_q,
  output logic [15:0]     idx_q
);
  // comparator tree, level by level, pairs (2k, 2k+1) -> k
  fp16_t       best_v;
  logic [15:0] best_i;
  always_comb begin
    fp16_t       tv [N];
    logic [15:0] ti [N];
    for (int i = 0; i < int'(N); i++) begin
      tv[i] = vals[i];
      ti[i] = base + 16'(i);
    end
    for (int w = int'(N) / 2; w >= 1; w = w / 2) begin
      for (int k = 0; k < w; k++) begin
        if (fp16_gt(tv[2*k+1], tv[2*k])) begin
          tv[k] = tv[2*k+1];
          ti[k] = ti[2*k+1];
        end else begin
          tv[k] = tv[2*k];
          ti[k] = ti[2*k];
        end
      end
    end
    best_v = tv[0];
    best_i = ti[0];
  end
  logic have;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      max_q <= FP16_NEGMAX;
      idx_q <= '0;
      have  <= 1'b0;
    end else if (clear) begin
      max_q <= FP16_NEGMAX;
      idx_q <= '0;
      have  <= 1'b0;
    end else if (in_valid) begin
      have <= 1'b1;
      if (!have || fp16_gt(best_v, max_q)) begin
        max_q <= best_v;
        idx_q <= best_i;
      end
    end
  end
endmodule
