// fp16_rcp: pipelined half-precision reciprocal (rsqrt=0) or reciprocal square root
// (rsqrt=1), LAT cycles. The paper provides these SFU_V functions with floating-point DSP
// operators and gives no latency for them; LAT=8 is this design's choice. The mantissa
// reciprocal is an integer division and the square root an integer square root
// (dfx_pkg::fp16_recip_f / fp16_rsqrt_f), both computed in the first stage.
module fp16_rcp
  import dfx_pkg::*;
#(
  parameter int unsigned LAT = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  rsqrt,
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
      q[0] <= rsqrt ? fp16_rsqrt_f(a) : fp16_recip_f(a);
      for (int i = 1; i < LAT; i++) begin
        v[i] <= v[i-1];
        q[i] <= q[i-1];
      end
    end
  end
  assign out_valid = v[LAT-1];
  assign y         = q[LAT-1];
endmodule
