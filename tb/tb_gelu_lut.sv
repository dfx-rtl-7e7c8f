// tb_gelu_lut: sweeps inputs across and beyond [-8, 8] and compares the interpolated GELU with
// the exact formula; checks the two-cycle latency and the saturation regions.
module tb_gelu_lut;
  import dfx_pkg::*;
  import fp16_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  fp16_t x, y;
  gelu_lut dut (.*);
  function automatic real gelu(input real v);
    real z;
    z = 0.7978845608 * (v + 0.044715 * v * v * v);
    return 0.5 * v * (1.0 + (1.0 - 2.0 / ($exp(2.0 * z) + 1.0)));
  endfunction
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    real v;
    x = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 400; k++) begin
      v = (real'($urandom_range(0, 24000)) - 12000.0) / 1000.0;
      if (k < 4) v = (k == 0) ? -9.5 : (k == 1) ? 9.25 : (k == 2) ? 0.0 : 1.0;
      v = h2r(r2h(v));
      @(negedge clk); x = r2h(v);
      @(negedge clk); @(negedge clk);   // two cycles later
      checks++;
      if (!close(h2r(y), gelu(v), 4.0e-3, 2.0e-3)) begin
        failures++;
        $display("FAIL x=%f got %f exp %f", v, h2r(y), gelu(v));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
