// sfu_m: special function unit behind the MFU (SFU_M, Fig. 11(a)).
//
// It receives the MFU's finished LANES-element groups in output-column order and applies, per
// element:
//   * scale   - multiply by a constant (the paper divides attention scores by a constant with a
//               multiplier instead of a divider); an FP16 multiplier, 6 cycles, bypassed by
//               multiplying by 1.0 when off so that every path has the same latency;
//   * mask    - for MaskedMM, columns whose index is above the current token position become the
//               FP16 value closest to -inf (0xFBFF), which softmax later turns into zero;
//   * GELU    - the 2048-sample lookup table with linear interpolation (gelu_lut, 2 cycles);
//   * bypass  - none of the above.
// The vectorizer then concatenates DIM/LANES consecutive groups into one DIM-element vector
// (the tiling's d = 64 output columns) and presents it on vec_valid/vec. In parallel the
// reduce-max unit tracks the max (and argmax, as an absolute column index) over all groups of
// the instruction; red_valid pulses once the last group (n_groups counted from start) is in.
//
// start clears the group counter, the vectorizer and the reduce-max unit; the mode inputs
// must stay stable while an instruction runs. Latency: group in -> vector out 6+2+1 = 9 cycles
// for the last group of a vector.
module sfu_m
  import dfx_pkg::*;
#(
  parameter int unsigned DIM   = 64,
  parameter int unsigned LANES = 16,
  parameter int unsigned MUL_LAT = 6
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               gelu_en,
  input  logic               scale_en,
  input  logic               mask_en,
  input  fp16_t              scale,
  input  logic [15:0]        mask_pos,     // last unmasked column (token position)
  input  logic [15:0]        n_groups,     // LANES-groups in this instruction
  input  logic               in_valid,
  input  fp16_t [LANES-1:0]  in,
  output logic               vec_valid,
  output fp16_t [DIM-1:0]    vec,
  output logic               red_valid,
  output fp16_t              red_max,
  output logic [15:0]        red_idx
);
  localparam int unsigned G  = DIM / LANES;
  localparam int unsigned GW = (G > 1) ? $clog2(G) : 1;

  // ---------------------------------------------------------------- group counter
  logic [15:0] gcnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        gcnt <= '0;
    else if (start)    gcnt <= '0;
    else if (in_valid) gcnt <= gcnt + 16'd1;
  end

  // ---------------------------------------------------------------- scale stage
  fp16_t [LANES-1:0] sc;
  logic              sc_v [LANES];
  for (genvar i = 0; i < LANES; i++) begin : g_sc
    fp16_mul #(.LAT(MUL_LAT)) u_mul (
      .clk, .rst_n, .in_valid(in_valid), .a(in[i]), .b(scale_en ? scale : FP16_ONE),
      .out_valid(sc_v[i]), .y(sc[i]));
  end
  logic [16:0] sb1;
  logic        final_in;
  assign final_in = in_valid && (gcnt + 16'd1 == n_groups);
  delay_line #(.W(17), .N(MUL_LAT)) u_sb1 (.clk, .rst_n, .d({final_in, gcnt}), .q(sb1));

  // ---------------------------------------------------------------- mask / GELU / bypass
  fp16_t [LANES-1:0] gl;
  fp16_t [LANES-1:0] mk_q1, mk_q2;
  for (genvar i = 0; i < LANES; i++) begin : g_fn
    gelu_lut u_gelu (.clk, .rst_n, .x(sc[i]), .y(gl[i]));
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mk_q1 <= '0;
      mk_q2 <= '0;
    end else begin
      for (int i = 0; i < int'(LANES); i++) begin
        logic [31:0] col;
        col = 32'(sb1[15:0]) * LANES + 32'(i);
        mk_q1[i] <= (mask_en && col > 32'(mask_pos)) ? FP16_NEGMAX : sc[i];
      end
      mk_q2 <= mk_q1;
    end
  end
  logic [17:0] sb2;
  delay_line #(.W(18), .N(2)) u_sb2 (.clk, .rst_n, .d({sc_v[0], sb1}), .q(sb2));
  logic              f_v, f_final;
  logic [15:0]       f_g;
  fp16_t [LANES-1:0] f_val;
  assign {f_v, f_final, f_g} = sb2;
  assign f_val = gelu_en ? gl : mk_q2;

  // ---------------------------------------------------------------- vectorizer
  fp16_t [G-1:0][LANES-1:0] vbuf;
  logic [GW-1:0] gi;
  assign gi = GW'(f_g % G);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vbuf      <= '0;
      vec_valid <= 1'b0;
    end else begin
      vec_valid <= f_v && ((32'(f_g) % G) == G - 1 || f_final);
      if (f_v) vbuf[gi] <= f_val;
      if (start) vec_valid <= 1'b0;
    end
  end
  assign vec = vbuf;

  // ---------------------------------------------------------------- reduce max
  reduce_max #(.N(LANES)) u_red (
    .clk, .rst_n, .clear(start), .in_valid(f_v), .vals(f_val), .base(16'(f_g * LANES)),
    .max_q(red_max), .idx_q(red_idx));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) red_valid <= 1'b0;
    else        red_valid <= f_v & f_final;
  end
endmodule
