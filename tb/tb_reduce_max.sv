// tb_reduce_max: streams random groups into the reduce-max unit and checks the running max
// and its absolute index against a software scan, including negative-only inputs.
module tb_reduce_max;
  import dfx_pkg::*;
  import fp16_ref_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear, in_valid;
  fp16_t [N-1:0] vals;
  logic [15:0] base, idx_q;
  fp16_t max_q;
  reduce_max dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    real best, v;
    int  bi;
    clear = 0; in_valid = 0; vals = '0; base = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      best = -1.0e9; bi = 0;
      for (int g = 0; g < 5; g++) begin
        for (int i = 0; i < N; i++) begin
          v = (real'($urandom_range(0, 4000)) - ((t % 2) ? 4100.0 : 2000.0)) / 100.0;
          vals[i] = r2h(v);
          v = h2r(vals[i]);
          if (v > best) begin best = v; bi = g * N + i; end
        end
        base = 16'(g * N); in_valid = 1;
        @(negedge clk);
      end
      in_valid = 0;
      @(negedge clk);
      checks++;
      if (h2r(max_q) != best || idx_q != 16'(bi)) begin
        failures++;
        $display("FAIL got %f@%0d exp %f@%0d", h2r(max_q), idx_q, best, bi);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
