// tb_sfu_m: feeds 16-lane groups into SFU_M in three modes (bypass with scaling, masking,
// GELU) and checks the concatenated 64-element vectors, the masked columns, the reduce-max
// result (max and argmax) and the group-to-vector latency.
module tb_sfu_m;
  import dfx_pkg::*;
  import fp16_ref_pkg::*;
  localparam int DIM = 64, LANES = 16, G = 4, NV = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, gelu_en, scale_en, mask_en, in_valid, vec_valid, red_valid;
  fp16_t scale, red_max;
  logic [15:0] mask_pos, n_groups, red_idx;
  fp16_t [LANES-1:0] in;
  fp16_t [DIM-1:0] vec;
  sfu_m dut (.*);
  function automatic real gelu(input real v);
    real z;
    z = 0.7978845608 * (v + 0.044715 * v * v * v);
    return 0.5 * v * (1.0 + (1.0 - 2.0 / ($exp(2.0 * z) + 1.0)));
  endfunction
  real expv [NV*DIM];
  int  nvec, cyc, t_last_in, t_vec;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n && vec_valid) begin
    t_vec = cyc;
    for (int i = 0; i < DIM; i++) begin
      checks++;
      if (!close(h2r(vec[i]), expv[nvec*DIM+i], 5.0e-3, 2.0e-3)) begin
        failures++;
        if (failures < 10) $display("FAIL v%0d[%0d] got %f exp %f", nvec, i, h2r(vec[i]), expv[nvec*DIM+i]);
      end
    end
    nvec++;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    real v, best;
    int bi;
    cyc = 0;
    start = 0; gelu_en = 0; scale_en = 0; mask_en = 0; in_valid = 0; in = '0;
    scale = 16'h3800; mask_pos = 0; n_groups = NV * G;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int mode = 0; mode < 3; mode++) begin
      @(negedge clk);
      start = 1; nvec = 0;
      scale_en = (mode == 0); mask_en = (mode == 1); gelu_en = (mode == 2);
      mask_pos = 16'd77;
      @(negedge clk); start = 0;
      best = -1.0e9; bi = 0;
      for (int g = 0; g < NV * G; g++) begin
        for (int i = 0; i < LANES; i++) begin
          int col;
          col = g * LANES + i;
          v = h2r(r2h((real'($urandom_range(0, 1000)) - 500.0) / 100.0));
          in[i] = r2h(v);
          if (mode == 0) v = v * 0.5;
          if (mode == 1 && col > 77) v = -65504.0;
          if (mode == 2) v = gelu(v);
          expv[col] = v;
          if (mode != 2 && v > best) begin best = v; bi = col; end
        end
        in_valid = 1;
        t_last_in = cyc;
        @(negedge clk);
      end
      in_valid = 0;
      repeat (20) @(negedge clk);
      checks++;
      if (nvec != NV) begin failures++; $display("FAIL mode %0d nvec %0d", mode, nvec); end
      checks++;
      if (t_vec - t_last_in != 9) begin failures++; $display("FAIL latency %0d", t_vec - t_last_in); end
      if (mode != 2) begin
        checks++;
        if (h2r(red_max) != best || red_idx != 16'(bi)) begin
          failures++; $display("FAIL max %f@%0d exp %f@%0d", h2r(red_max), red_idx, best, bi);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
