// tb_sfu_v: checks the SFU_V vector bypass and the accumulate path with each post-processing
// chain used by LayerNorm and softmax: plain sum, mean (x 1/emb), mean + epsilon followed by
// reciprocal square root, and reciprocal of a sum.
module tb_sfu_v;
  import dfx_pkg::*;
  import fp16_ref_pkg::*;
  localparam int DIM = 64, NV = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, accum_en, post_mean, post_eps, post_recip, post_rsqrt, in_valid, vec_valid, sc_valid;
  logic [15:0] n_vec;
  fp16_t inv_emb, eps, sc;
  fp16_t [DIM-1:0] in, vec_out;
  sfu_v dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    real s, e;
    start = 0; accum_en = 0; post_mean = 0; post_eps = 0; post_recip = 0; post_rsqrt = 0;
    in_valid = 0; n_vec = NV; in = '0;
    inv_emb = r2h(1.0 / 320.0); eps = r2h(0.01);
    repeat (2) @(posedge clk);
    rst_n = 1;
    // bypass
    for (int i = 0; i < DIM; i++) in[i] = r2h(real'(i) / 8.0);
    @(negedge clk); in_valid = 1; #1;
    checks++;
    if (!vec_valid || vec_out != in) begin failures++; $display("FAIL bypass"); end
    @(negedge clk); in_valid = 0;
    for (int mode = 0; mode < 4; mode++) begin
      @(negedge clk);
      start = 1; accum_en = 1;
      post_mean = (mode == 1 || mode == 2); post_eps = (mode == 2);
      post_rsqrt = (mode == 2); post_recip = (mode == 3);
      @(negedge clk); start = 0;
      s = 0.0;
      for (int v = 0; v < NV; v++) begin
        for (int i = 0; i < DIM; i++) begin
          in[i] = r2h(real'($urandom_range(0, 400)) / 100.0);
          s += h2r(in[i]);
        end
        in_valid = 1;
        #1 checks++;
        if (vec_valid) begin failures++; $display("FAIL vec_valid during accumulate"); end
        @(negedge clk);
      end
      in_valid = 0;
      case (mode)
        0: e = s;
        1: e = s / 320.0;
        2: e = 1.0 / $sqrt(s / 320.0 + 0.01);
        default: e = 1.0 / s;
      endcase
      while (!sc_valid) @(negedge clk);
      checks++;
      if (!close(h2r(sc), e, 8.0e-3, 1.0e-4)) begin
        failures++; $display("FAIL mode %0d got %f exp %f", mode, h2r(sc), e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
