// mfu_lane: one lane of the matrix function unit (MFU), Fig. 11(a) of the DFX design.
//
// Each cycle the lane takes a D-element input vector x (the same for all lanes) and one
// D-element weight column w, multiplies them element-wise with D FP16 multipliers and reduces
// the products with a log2(D)-deep tree of FP16 adders into one partial dot product. A final
// accumulate adder adds that partial sum either to the bias (first row tile of an output
// column) or to the running sum held in the lane's partial-sum buffer, selected by a mux, and
// writes the result back into the buffer. When the last row tile has been added the sum leaves
// the lane as a finished output element.
//
// The buffer holds SLOTS running sums (one per column of a DxD tile handled by this lane:
// D/L = 4 by default). The MFU does not check hazards on the buffer: the operand collector
// must not issue the same slot again before its previous sum has come back, i.e. the same slot
// may re-enter at most every ACC_GAP = ACC_LAT+1 cycles (this design's choice; the paper does not
// say how the accumulate loop hides the adder latency).
//
// Timing: in_valid at cycle 0 gives out_valid at cycle MUL_LAT + log2(D)*ADD_LAT + ADD_LAT
// (6 + 66 + 11 = 83 at the defaults). Operator latencies are the paper's (multiplier 6 cycles,
// adder 11 cycles); D is the paper's tile dimension d = 64.
module mfu_lane
  import dfx_pkg::*;
#(
  parameter int unsigned DIM     = 64,
  parameter int unsigned SLOTS   = 4,
  parameter int unsigned MUL_LAT = 6,
  parameter int unsigned ADD_LAT = 11
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     first,      // first row tile: add bias instead of buffer
  input  logic                     last,       // last row tile: emit the finished sum
  input  logic [$clog2(SLOTS)-1:0] slot,
  input  fp16_t                    bias,
  input  fp16_t [DIM-1:0]          x,
  input  fp16_t [DIM-1:0]          w,
  output logic                     out_valid,
  output logic [$clog2(SLOTS)-1:0] out_slot,
  output fp16_t                    out
);
  localparam int unsigned LEVELS = $clog2(DIM);
  localparam int unsigned SW     = $clog2(SLOTS);
  localparam int unsigned TREE_LAT = MUL_LAT + LEVELS * ADD_LAT;

  // ------------------------------------------------------------ multipliers
  fp16_t prod [DIM];
  logic  pv   [DIM];
  for (genvar i = 0; i < DIM; i++) begin : g_mul
    fp16_mul #(.LAT(MUL_LAT)) u_mul (
      .clk, .rst_n, .in_valid(in_valid), .a(x[i]), .b(w[i]), .out_valid(pv[i]), .y(prod[i]));
  end

  // ------------------------------------------------------------ adder tree
  // node k of level 0 is prod[k]; level j has DIM>>j nodes
  fp16_t node [LEVELS+1][DIM];
  logic  nv   [LEVELS+1];
  for (genvar i = 0; i < DIM; i++) begin : g_l0
    assign node[0][i] = prod[i];
  end
  assign nv[0] = pv[0];
  for (genvar j = 0; j < LEVELS; j++) begin : g_lvl
    logic vv [DIM>>(j+1)];
    for (genvar k = 0; k < (DIM >> (j+1)); k++) begin : g_add
      fp16_add #(.LAT(ADD_LAT)) u_add (
        .clk, .rst_n, .in_valid(nv[j]), .sub(1'b0), .a(node[j][2*k]), .b(node[j][2*k+1]),
        .out_valid(vv[k]), .y(node[j+1][k]));
    end
    assign nv[j+1] = vv[0];
    for (genvar k = (DIM >> (j+1)); k < DIM; k++) begin : g_pad
      assign node[j+1][k] = FP16_ZERO;
    end
  end

  // ------------------------------------------------------------ side band
  logic [SW+2+16-1:0] sb_d, sb_q;
  logic               t_first, t_last;
  logic [SW-1:0]      t_slot;
  fp16_t              t_bias;
  assign sb_d = {first, last, slot, bias};
  delay_line #(.W(SW+2+16), .N(TREE_LAT)) u_sb (.clk, .rst_n, .d(sb_d), .q(sb_q));
  assign {t_first, t_last, t_slot, t_bias} = sb_q;

  // ------------------------------------------------------------ accumulate + buffer
  fp16_t buffer [SLOTS];
  fp16_t acc_b;
  fp16_t acc_y;
  logic  acc_v;
  logic [SW:0] acc_sb_q;
  assign acc_b = t_first ? t_bias : buffer[t_slot];
  fp16_add #(.LAT(ADD_LAT)) u_acc (
    .clk, .rst_n, .in_valid(nv[LEVELS]), .sub(1'b0), .a(node[LEVELS][0]), .b(acc_b),
    .out_valid(acc_v), .y(acc_y));
  delay_line #(.W(SW+1), .N(ADD_LAT)) u_sb2 (.clk, .rst_n, .d({t_last, t_slot}), .q(acc_sb_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(SLOTS); i++) buffer[i] <= FP16_ZERO;
    end else if (acc_v) begin
      buffer[acc_sb_q[SW-1:0]] <= acc_y;
    end
  end

  assign out_valid = acc_v & acc_sb_q[SW];
  assign out_slot  = acc_sb_q[SW-1:0];
  assign out       = acc_y;
endmodule
