// vfu: vector function unit (Fig. 11(b)), a DIM-wide FP16 ALU.
//
// Operations, one per instruction (the paper: "No instruction requires more than one ALU
// operation"), on two DIM-element operands a and b (b may be a broadcast scalar, prepared by
// the vector operand collector):
//   VF_ADD  a + b         11 cycles (FP16 adder)
//   VF_SUB  a - b         11 cycles
//   VF_MUL  a * b          6 cycles (FP16 multiplier)
//   VF_EXP  e^(a - b)     15 cycles: the subtractor feeds the 4-cycle exponential, as drawn in
//                         the paper's figure; it gives the max-subtracted softmax numerator
//   VF_PASS a              1 cycle: the bypass used by load and store
// All lanes run in lock step. Different operations have different latencies, so results of two
// instructions could meet at the output mux; the vector operand collector prevents this by
// draining the VFU before it starts an instruction of another kind.
module vfu
  import dfx_pkg::*;
#(
  parameter int unsigned DIM = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [2:0]      op,
  input  fp16_t [DIM-1:0] a,
  input  fp16_t [DIM-1:0] b,
  output logic            out_valid,
  output fp16_t [DIM-1:0] out
);
  localparam logic [2:0] VF_ADD = 3'd0, VF_SUB = 3'd1, VF_MUL = 3'd2, VF_EXP = 3'd3,
                         VF_PASS = 3'd4;
  fp16_t [DIM-1:0] add_y, mul_y, exp_y;
  logic add_v [DIM];
  logic mul_v [DIM];
  logic exp_v [DIM];
  logic is_add, is_mul;
  assign is_add = in_valid && (op == VF_ADD || op == VF_SUB || op == VF_EXP);
  assign is_mul = in_valid && (op == VF_MUL);

  // the add/sub result goes out directly, or through the exponential for VF_EXP
  logic exp_pending;
  delay_line #(.W(1), .N(11)) u_dexp (.clk, .rst_n, .d(in_valid && op == VF_EXP), .q(exp_pending));
  for (genvar i = 0; i < DIM; i++) begin : g_lane
    fp16_add u_add (.clk, .rst_n, .in_valid(is_add), .sub(op != VF_ADD), .a(a[i]), .b(b[i]),
                    .out_valid(add_v[i]), .y(add_y[i]));
    fp16_mul u_mul (.clk, .rst_n, .in_valid(is_mul), .a(a[i]), .b(b[i]),
                    .out_valid(mul_v[i]), .y(mul_y[i]));
    fp16_exp u_exp (.clk, .rst_n, .in_valid(add_v[i] && exp_pending), .a(add_y[i]),
                    .out_valid(exp_v[i]), .y(exp_y[i]));
  end

  fp16_t [DIM-1:0] pass_q;
  logic            pass_v;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pass_q <= '0;
      pass_v <= 1'b0;
    end else begin
      pass_v <= in_valid && op == VF_PASS;
      pass_q <= a;
    end
  end

  always_comb begin
    out_valid = 1'b0;
    out       = pass_q;
    if (pass_v) begin
      out_valid = 1'b1;
    end else if (exp_v[0]) begin
      out_valid = 1'b1;
      out       = exp_y;
    end else if (add_v[0] && !exp_pending) begin
      out_valid = 1'b1;
      out       = add_y;
    end else if (mul_v[0]) begin
      out_valid = 1'b1;
      out       = mul_y;
    end
  end
endmodule
