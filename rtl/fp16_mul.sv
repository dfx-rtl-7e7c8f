// fp16_mul: pipelined IEEE-754 half-precision multiplier, LAT cycles from in_valid to
// out_valid (default 6, the multiplier latency the paper gives for its FP16 DSP operators).
// The product is formed and rounded (nearest even, subnormals flushed to zero) by
// dfx_pkg::fp16_mul_f in the first stage and then carried through LAT-1 pipeline registers,
// so a new operand pair can enter every cycle. The paper uses vendor floating-point operator
// IP here; this is a plain-RTL replacement with the same latency.
module fp16_mul
  import dfx_pkg::*;
#(
  parameter int unsigned LAT = 6
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp16_t a,
  input  fp16_t b,
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
      q[0] <= fp16_mul_f(a, b);
      for (int i = 1; i < LAT; i++) begin
        v[i] <= v[i-1];
        q[i] <= q[i-1];
      end
    end
  end
  assign out_valid = v[LAT-1];
  assign y         = q[LAT-1];
endmodule
