// gelu_lut: GELU activation y = 0.5x(1 + tanh(sqrt(2/pi)(x + 0.044715x^3))) for one FP16
// element, by table lookup with linear interpolation, as in the paper's SFU_M: 2048 samples
// over [-8, 8] (a step of 1/128), with y = 0 below -8 and y = x above 8, where the slope has
// converged. The table holds the FP16 GELU value at x_k = -8 + k/128 for k = 0..2048 (the extra
// end point closes the last interval) and is computed at elaboration from the formula above.
// Interpolation is done in signed fixed point with 16 fraction bits (this design's choice).
// Latency is two cycles: table read, then interpolation and conversion back to FP16.
module gelu_lut
  import dfx_pkg::*;
#(
  parameter int unsigned SAMPLES = 2048
) (
  input  logic  clk,
  input  logic  rst_n,
  input  fp16_t x,
  output fp16_t y
);
  localparam int unsigned IW = $clog2(SAMPLES);

  typedef fp16_t table_t [SAMPLES+1];

  function automatic fp16_t real_to_fp16(input real r);
    logic [63:0] b;
    int          e;
    logic [11:0] m;
    b = $realtobits(r);
    e = int'(b[62:52]) - 1023 + 15;
    if (r == 0.0 || e <= 0) return FP16_ZERO;
    m = {2'b01, b[51:42]} + {11'd0, b[41]};
    if (m[11]) begin
      m = m >> 1;
      e = e + 1;
    end
    return {b[63], e[4:0], m[9:0]};
  endfunction

  function automatic table_t make_table();
    table_t t;
    for (int k = 0; k <= int'(SAMPLES); k++) begin
      real xr, z, th;
      xr   = -8.0 + 16.0 * real'(k) / real'(SAMPLES);
      z    = 0.7978845608028654 * (xr + 0.044715 * xr * xr * xr);
      th   = 1.0 - 2.0 / ($exp(2.0 * z) + 1.0);
      t[k] = real_to_fp16(0.5 * xr * (1.0 + th));
    end
    return t;
  endfunction

  localparam table_t TABLE = make_table();

  // stage 1: index and fraction, table read
  logic signed [31:0] xf, u;
  logic [IW:0]        idx;
  assign xf  = fp16_to_fx16(x);
  // u = (x + 8) * SAMPLES/16, in 2^16 units
  assign u   = (xf + 32'sh0008_0000) <<< (IW - 4);
  assign idx = u[16+IW:16];

  fp16_t              y0_q, y1_q, x_q;
  logic [15:0]        fr_q;
  logic [1:0]         rng_q;   // 0: inside, 1: below -8, 2: above 8
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y0_q <= FP16_ZERO; y1_q <= FP16_ZERO; x_q <= FP16_ZERO; fr_q <= '0; rng_q <= '0;
    end else begin
      x_q  <= x;
      fr_q <= u[15:0];
      if (xf < -32'sh0008_0000)                             rng_q <= 2'd1;
      else if (xf >= 32'sh0008_0000 || x[14:10] == 5'h1F)   rng_q <= 2'd2;
      else                                                  rng_q <= 2'd0;
      y0_q <= TABLE[idx];
      y1_q <= TABLE[(idx == (IW+1)'(SAMPLES)) ? idx : idx + 1'b1];
    end
  end

  // stage 2: y = y0 + (y1 - y0) * frac
  logic signed [31:0] f0, f1;
  logic signed [63:0] prod;
  logic signed [31:0] yi;
  assign f0   = fp16_to_fx16(y0_q);
  assign f1   = fp16_to_fx16(y1_q);
  assign prod = 64'(f1 - f0) * $signed({48'd0, fr_q});
  assign yi   = f0 + 32'(prod >>> 16);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) y <= FP16_ZERO;
    else case (rng_q)
      2'd1:    y <= FP16_ZERO;
      2'd2:    y <= x_q;
      default: y <= fx16_to_fp16(yi);
    endcase
  end
endmodule
