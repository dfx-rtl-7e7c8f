// dfx_pkg: types, constants and FP16 arithmetic shared by the DFX compute core.
//
// The core works on IEEE-754 half precision (1 sign, 5 exponent, 10 mantissa bits), as the
// paper states. The functions below are the combinational arithmetic behind the pipelined
// operator modules (fp16_mul, fp16_add, fp16_exp, fp16_rcp); the pipelining is done there.
// Subnormals are flushed to zero and results are rounded to nearest even; both are choices
// of this design (the paper uses vendor floating-point operators and does not say).
//
// The tile dimension D=64 and lane count L=16 are the paper's (d, l) = (64, 16). The
// instruction word layout, the opcode numbering and the configuration record are this
// design's own: the paper names the three instruction types and their fields only.
package dfx_pkg;

  localparam int unsigned D = 64;        // tile dimension d (elements per vector)
  localparam int unsigned L = 16;        // MFU lanes l
  localparam int unsigned FPW = 16;      // FP16 word

  typedef logic [15:0] fp16_t;
  typedef fp16_t [D-1:0] vec_t;          // one 64x16-bit vector
  typedef fp16_t [L-1:0] lvec_t;         // one 16x16-bit lane group

  localparam fp16_t FP16_ZERO   = 16'h0000;
  localparam fp16_t FP16_ONE    = 16'h3C00;
  localparam fp16_t FP16_NEGMAX = 16'hFBFF;   // closest representable value to -inf
  localparam fp16_t FP16_INF    = 16'h7C00;
  localparam fp16_t FP16_NAN    = 16'h7E00;

  // ---------------------------------------------------------------- instructions
  typedef enum logic [1:0] {
    IT_COMPUTE = 2'd0,
    IT_DMA     = 2'd1,
    IT_ROUTER  = 2'd2,
    IT_CTRL    = 2'd3
  } itype_e;

  typedef enum logic [4:0] {
    // matrix instructions (MPU)
    OP_CONV1D    = 5'd0,   // y = W x (fully-connected layer; its bias is added by a VADD)
    OP_MM        = 5'd1,   // y = W x
    OP_MASKED_MM = 5'd2,   // y = W x, columns beyond the token position set to -max
    // vector instructions (VPU)
    OP_VADD      = 5'd8,
    OP_VSUB      = 5'd9,
    OP_VMUL      = 5'd10,
    OP_VEXP      = 5'd11,  // exp(src1 - src2)
    OP_VACCUM    = 5'd12,  // scalar = post(sum of all elements)
    OP_VLOAD     = 5'd13,  // buffer -> vector register file (bypass)
    OP_VSTORE    = 5'd14,  // vector register file -> buffer (bypass)
    // DMA instructions
    OP_D_WEIGHT  = 5'd16,  // HBM -> weight buffer
    OP_D_BIAS    = 5'd17,  // DDR -> bias buffer
    OP_D_LDVEC   = 5'd18,  // DDR -> load buffer
    OP_D_STVEC   = 5'd19,  // store buffer -> DDR
    OP_D_EMB     = 5'd20,  // DDR WTE/WPE row -> embed buffer
    OP_D_STK     = 5'd21,  // key/value buffer -> HBM, Key layout
    OP_D_STV     = 5'd22,  // key/value buffer -> HBM, Value layout (transposed)
    OP_D_STTOK   = 5'd23,  // generated token -> DDR
    // router
    OP_R_SYNC    = 5'd24,
    // control
    OP_C_END     = 5'd31
  } op_e;

  // flag bits (meaning depends on the instruction class)
  localparam int unsigned F_GELU    = 0;  // matrix: apply GELU
  localparam int unsigned F_SCALE   = 1;  // matrix: multiply by attention scale
  localparam int unsigned F_MAX     = 2;  // matrix: write reduce-max to scalar register dst2
  localparam int unsigned F_ARGMAX  = 3;  // matrix: write argmax as the generated token
  localparam int unsigned F_TS_IN   = 4;  // length scaled by the number of 64-token tiles
  localparam int unsigned F_TS_OUT  = 5;  // output count scaled by the number of token tiles
  localparam int unsigned F_SCALAR  = 6;  // vector: src2 is a scalar register
  localparam int unsigned F_LAYER   = 7;  // dma: add layer offset to the memory address
  localparam int unsigned F_WPE     = 8;  // dma embed: index by position instead of token
  // vector accumulate post-processing (same bit positions, OP_VACCUM only)
  localparam int unsigned F_MEAN    = 0;  // multiply sum by 1/emb
  localparam int unsigned F_EPS     = 1;  // add epsilon
  localparam int unsigned F_RECIP   = 2;  // reciprocal
  localparam int unsigned F_RSQRT   = 3;  // reciprocal square root

  // buffer selectors for VLOAD / VSTORE (aux field)
  typedef enum logic [2:0] {
    BUF_LOAD  = 3'd0,   // DMA load/store buffer (DDR)
    BUF_EMBED = 3'd1,   // DMA embed buffer
    BUF_KV    = 3'd2,   // DMA key/value buffer (HBM)
    BUF_TX    = 3'd3,   // router TX buffer
    BUF_RX    = 3'd4    // router RX buffer
  } buf_e;

  typedef struct packed {
    itype_e      itype;   // 2
    op_e         op;      // 5
    logic [8:0]  flags;   // 9
    logic [23:0] src1;    // 24
    logic [23:0] src2;    // 24
    logic [23:0] dst;     // 24
    logic [15:0] len;     // 16  input vectors / transfer size
    logic [15:0] aux;     // 16  output vectors / buffer select / scalar dst
    logic [7:0]  rsvd;    // 8
  } instr_t;              // 128 bits

  // system configuration written by the host
  typedef struct packed {
    logic [7:0]  core_id;
    logic [7:0]  n_cores;
    logic [7:0]  n_layers;
    logic [15:0] n_in;        // input (context) tokens
    logic [15:0] n_out;       // output tokens to generate
    logic [11:0] pc_embed;    // program section: token embedding
    logic [11:0] pc_layer;    // program section: one decoder layer
    logic [11:0] pc_head;     // program section: LM head
    logic [31:0] hbm_layer_stride;  // HBM beats per layer
    logic [31:0] ddr_layer_stride;  // DDR words per layer
    logic [31:0] in_tok_addr;       // DDR word address of the input token list
    logic [31:0] out_tok_addr;      // DDR word address of the output token list
    logic [15:0] emb_words;         // DDR words per embedding row
    fp16_t       inv_emb;     // 1/emb
    fp16_t       eps;         // LayerNorm epsilon
    fp16_t       attn_scale;  // score scale
  } cfg_t;

  // ---------------------------------------------------------------- FP16 arithmetic
  function automatic fp16_t fp16_pack(input logic s, input int e, input logic [10:0] m11,
                                      input logic g, input logic st);
    // m11 has its hidden bit at [10]; round to nearest even with guard g and sticky st
    logic [11:0] r;
    int          ee;
    r  = {1'b0, m11};
    ee = e;
    if (g && (st || m11[0])) r = r + 12'd1;
    if (r[11]) begin
      r  = r >> 1;
      ee = ee + 1;
    end
    if (ee >= 31) return {s, 5'h1F, 10'h0};
    if (ee <= 0)  return {s, 15'h0};
    return {s, ee[4:0], r[9:0]};
  endfunction

  function automatic logic fp16_is_nan(input fp16_t a);
    return (a[14:10] == 5'h1F) && (a[9:0] != 0);
  endfunction

  function automatic fp16_t fp16_mul_f(input fp16_t a, input fp16_t b);
    logic        s;
    logic [21:0] p;
    int          e;
    s = a[15] ^ b[15];
    if (fp16_is_nan(a) || fp16_is_nan(b)) return FP16_NAN;
    if (a[14:10] == 5'h1F || b[14:10] == 5'h1F) begin
      if (a[14:10] == 0 || b[14:10] == 0) return FP16_NAN;
      return {s, 5'h1F, 10'h0};
    end
    if (a[14:10] == 0 || b[14:10] == 0) return {s, 15'h0};
    p = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e = int'(a[14:10]) + int'(b[14:10]) - 15;
    if (p[21]) return fp16_pack(s, e + 1, p[21:11], p[10], |p[9:0]);
    else       return fp16_pack(s, e,     p[20:10], p[9],  |p[8:0]);
  endfunction

  function automatic fp16_t fp16_add_f(input fp16_t a, input fp16_t b);
    fp16_t       x, y;
    logic [14:0] mx, my;   // hidden bit at [13], 3 guard bits
    logic [14:0] sh;
    logic [15:0] sum;
    int          ex, d, lz;
    logic        stk;
    if (fp16_is_nan(a) || fp16_is_nan(b)) return FP16_NAN;
    if (a[14:10] == 5'h1F && b[14:10] == 5'h1F && a[15] != b[15]) return FP16_NAN;
    if (a[14:10] == 5'h1F) return a;
    if (b[14:10] == 5'h1F) return b;
    if (a[14:10] == 0 && b[14:10] == 0) return {a[15] & b[15], 15'h0};
    if (a[14:10] == 0) return b;
    if (b[14:10] == 0) return a;
    if (a[14:0] >= b[14:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    ex = int'(x[14:10]);
    d  = ex - int'(y[14:10]);
    mx = {1'b0, 1'b1, x[9:0], 3'b000};
    my = {1'b0, 1'b1, y[9:0], 3'b000};
    if (d > 14) begin
      sh = 15'd0; stk = 1'b1;
    end else begin
      sh  = my >> d;
      stk = 1'b0;
      for (int i = 0; i < 15; i++) if (i < d && my[i]) stk = 1'b1;
    end
    sh[0] = sh[0] | stk;
    if (x[15] == y[15]) begin
      sum = {1'b0, mx} + {1'b0, sh};
      if (sum[14]) begin
        // carry out: shift right by one, keep sticky
        sum = {1'b0, sum[15:1]} | {15'd0, sum[0]};
        ex  = ex + 1;
      end
    end else begin
      sum = {1'b0, mx} - {1'b0, sh};
      if (sum == 0) return FP16_ZERO;
      lz = 0;
      for (int i = 13; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      ex  = ex - lz;
    end
    // sum[13] is the hidden bit, sum[12:3] fraction, sum[2] guard, sum[1:0] sticky
    return fp16_pack(x[15], ex, sum[13:3], sum[2], |sum[1:0]);
  endfunction

  // signed fixed point value of an FP16 number, scaled by 2^16, saturated to +/-2^24
  function automatic logic signed [31:0] fp16_to_fx16(input fp16_t a);
    logic signed [31:0] v;
    int e;
    e = int'(a[14:10]);
    if (e == 0) return 32'sd0;
    if (e >= 24) v = 32'sh0100_0000;               // |a| >= 512: saturate
    else if (e >= 9) v = 32'(({1'b1, a[9:0]}) << (e - 9));
    else v = 32'(({1'b1, a[9:0]}) >> (9 - e));
    return a[15] ? -v : v;
  endfunction

  // exp(x) = 2^(x log2 e): integer part goes to the exponent, 2^f by a cubic polynomial
  function automatic fp16_t fp16_exp_f(input fp16_t a);
    logic signed [31:0] xf;
    logic signed [63:0] y;
    logic signed [31:0] n;
    logic [15:0]        f;
    logic [47:0]        p;
    logic [17:0]        m;   // Q16, in [1,2)
    if (fp16_is_nan(a)) return FP16_NAN;
    if (a[14:10] == 5'h1F) return a[15] ? FP16_ZERO : FP16_INF;
    xf = fp16_to_fx16(a);
    y  = 64'(xf) * 64'sd94548;                     // log2(e) in Q16 -> y in Q32
    n  = 32'(y >>> 32);
    f  = y[31:16];
    // 2^f ~= 1 + f(0.6958 + f(0.2251 + 0.0790 f)), coefficients in Q16
    p = 48'(5177) * 48'(f);
    p = (48'(14752) + (p >> 16)) * 48'(f);
    p = (48'(45600) + (p >> 16)) * 48'(f);
    m = 18'(18'h10000 + (p >> 16));
    if (m[17]) begin
      m = 18'h10000;                               // rounding reached 2.0
      n = n + 1;
    end
    if (n + 15 >= 31) return FP16_INF;
    if (n + 15 <= 0)  return FP16_ZERO;
    return fp16_pack(1'b0, 32'(n + 15), {1'b1, m[15:6]}, m[5], |m[4:0]);
  endfunction

  function automatic fp16_t fp16_recip_f(input fp16_t a);
    logic [24:0] q;
    int e;
    if (fp16_is_nan(a)) return FP16_NAN;
    if (a[14:10] == 0)    return {a[15], 5'h1F, 10'h0};
    if (a[14:10] == 5'h1F) return {a[15], 15'h0};
    e = int'(a[14:10]);
    q = 25'(25'h100_0000 / {1'b1, a[9:0]});       // 2^24 / 1.m*2^10, in (2^13, 2^14]
    if (q[14]) return fp16_pack(a[15], 30 - e, 11'h400, 1'b0, 1'b0);
    return fp16_pack(a[15], 29 - e, q[13:3], q[2], |q[1:0]);
  endfunction

  function automatic logic [25:0] isqrt52(input logic [51:0] v);
    logic [51:0] rem, root, bitv;
    rem  = v;
    root = 0;
    bitv = 52'h1 << 50;
    for (int i = 0; i < 26; i++) begin
      if (rem >= root + bitv) begin
        rem  = rem - (root + bitv);
        root = (root >> 1) + bitv;
      end else begin
        root = root >> 1;
      end
      bitv = bitv >> 2;
    end
    return root[25:0];
  endfunction

  function automatic fp16_t fp16_rsqrt_f(input fp16_t a);
    int          eu, half;
    logic [12:0] v;
    logic [51:0] num;
    logic [25:0] r;
    if (fp16_is_nan(a)) return FP16_NAN;
    if (a[14:10] == 0) return FP16_INF;
    if (a[15]) return FP16_NAN;
    if (a[14:10] == 5'h1F) return FP16_ZERO;
    eu = int'(a[14:10]) - 15;                      // unbiased exponent
    if (eu[0]) begin v = {1'b0, 1'b1, a[9:0], 1'b0}; eu = eu - 1; end   // value 2*1.m
    else       begin v = {2'b00, 1'b1, a[9:0]}; end
    half = eu / 2;
    num = 52'(53'h10_0000_0000_0000 / 53'(v));     // 2^52 / v
    r   = isqrt52(num);                            // 2^26/sqrt(v) = 2^21/sqrt(value)
    if (r[21]) return fp16_pack(1'b0, 15 - half, 11'h400, 1'b0, 1'b0);
    return fp16_pack(1'b0, 14 - half, r[20:10], r[9], |r[8:0]);
  endfunction

  // FP16 value of a signed fixed point number scaled by 2^16 (round to nearest even)
  function automatic fp16_t fx16_to_fp16(input logic signed [31:0] v);
    logic        s;
    logic [31:0] a;
    int          msb;
    logic [10:0] m;
    logic        g, st;
    s = v[31];
    a = s ? 32'(-v) : 32'(v);
    if (a == 0) return FP16_ZERO;
    msb = 0;
    for (int i = 0; i < 32; i++) if (a[i]) msb = i;
    if (msb >= 10) begin
      m  = 11'(a >> (msb - 10));
      g  = (msb >= 11) ? a[msb-11] : 1'b0;
      st = (msb >= 12) ? ((a & ((32'd1 << (msb - 11)) - 1)) != 0) : 1'b0;
    end else begin
      m  = 11'(a << (10 - msb));
      g  = 1'b0;
      st = 1'b0;
    end
    return fp16_pack(s, msb - 16 + 15, m, g, st);
  endfunction

  // a > b for FP16 numbers (no NaN handling)
  function automatic logic fp16_gt(input fp16_t a, input fp16_t b);
    logic az, bz;
    az = (a[14:0] == 0);
    bz = (b[14:0] == 0);
    if (az && bz) return 1'b0;
    if (a[15] != b[15]) return b[15];
    if (!a[15]) return a[14:0] > b[14:0];
    return a[14:0] < b[14:0];
  endfunction

  // number of 64-token tiles covering positions 0..t
  function automatic logic [15:0] token_tiles(input logic [15:0] t);
    return (t >> 6) + 16'd1;
  endfunction

endpackage
