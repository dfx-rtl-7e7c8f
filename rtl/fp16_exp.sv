// fp16_exp: pipelined half-precision exponential y = e^a, LAT cycles (default 4, the
// latency the paper gives for the VFU exponential). The paper does not describe how its
// exponential works; this design computes 2^(a*log2 e) with the integer part placed in the
// exponent and 2^f for the fraction by a cubic polynomial in fixed point
// (dfx_pkg::fp16_exp_f), accurate to about one FP16 ulp.
module fp16_exp
  import dfx_pkg::*;
#(
  parameter int unsigned LAT = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp16_t a,
  output logic  out_valid,
  output fp16_t y
);
  fp16_t q [LAT];
  logic  v [LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin
        v[i] <= 1'b0;
        q[i] <= FP16_ZERO;
      end
    end else begin
      v[0] <= in_valid;
      q[0] <= fp16_exp_f(a);
      for (int i = 1; i < LAT; i++) begin
        v[i] <= v[i-1];
        q[i] <= q[i-1];
      end
    end
  end
  assign out_valid = v[LAT-1];
  assign y         = q[LAT-1];
endmodule
