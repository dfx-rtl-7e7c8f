// mfu: the matrix function unit, LANES parallel mfu_lane instances (Fig. 11(a)).
//
// The input vector x (DIM elements) is broadcast to every lane ("16-way duplicate" in the
// paper's figure); each lane gets its own weight column, so one cycle performs DIM x LANES
// multiplications: exactly one HBM beat of weights (16 x 64 x 16 bit = 32 x 512 bit) at the
// paper's d = 64, l = 16. Each lane also gets its own bias element. All lanes share the
// first/last/slot control, so the LANES outputs leave together as one LANES-element group,
// MFU_LAT = 6 + 6*11 + 11 = 83 cycles after the operands entered.
module mfu
  import dfx_pkg::*;
#(
  parameter int unsigned DIM   = 64,
  parameter int unsigned LANES = 16,
  parameter int unsigned SLOTS = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     first,
  input  logic                     last,
  input  logic [$clog2(SLOTS)-1:0] slot,
  input  fp16_t [LANES-1:0]        bias,
  input  fp16_t [DIM-1:0]          x,
  input  fp16_t [LANES-1:0][DIM-1:0] w,
  output logic                     out_valid,
  output logic [$clog2(SLOTS)-1:0] out_slot,
  output fp16_t [LANES-1:0]        out
);
  logic                     ov [LANES];
  logic [$clog2(SLOTS)-1:0] os [LANES];
  for (genvar i = 0; i < LANES; i++) begin : g_lane
    mfu_lane #(.DIM(DIM), .SLOTS(SLOTS)) u_lane (
      .clk, .rst_n, .in_valid, .first, .last, .slot, .bias(bias[i]), .x, .w(w[i]),
      .out_valid(ov[i]), .out_slot(os[i]), .out(out[i]));
  end
  assign out_valid = ov[0];
  assign out_slot  = os[0];
endmodule
