// tb_vfu: runs each VFU operation on random 64-element vectors, compares every element with
// real arithmetic and checks the latency of each operation (add/sub 11, mul 6, exp 15,
// bypass 1).
module tb_vfu;
  import dfx_pkg::*;
  import fp16_ref_pkg::*;
  localparam int DIM = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, out_valid;
  logic [2:0] op;
  fp16_t [DIM-1:0] a, b, out;
  vfu dut (.*);
  int lat [5] = '{11, 11, 6, 15, 1};
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    real x [DIM], y [DIM], e;
    int c;
    in_valid = 0; op = 0; a = '0; b = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 4; rep++)
      for (int o = 0; o < 5; o++) begin
        for (int i = 0; i < DIM; i++) begin
          x[i] = h2r(r2h((real'($urandom_range(0, 800)) - 400.0) / 100.0));
          y[i] = h2r(r2h((real'($urandom_range(0, 800)) - 400.0) / 100.0));
          a[i] = r2h(x[i]); b[i] = r2h(y[i]);
        end
        @(negedge clk); in_valid = 1; op = 3'(o);
        @(negedge clk); in_valid = 0;
        c = 1;
        while (!out_valid && c < 40) begin @(negedge clk); c++; end
        checks++;
        if (c != lat[o]) begin failures++; $display("FAIL op %0d latency %0d", o, c); end
        for (int i = 0; i < DIM; i++) begin
          case (o)
            0: e = x[i] + y[i];
            1: e = x[i] - y[i];
            2: e = x[i] * y[i];
            3: e = $exp(x[i] - y[i]);
            default: e = x[i];
          endcase
          checks++;
          if (!close(h2r(out[i]), e, 4.0e-3, 1.0e-3)) begin
            failures++;
            if (failures < 10) $display("FAIL op %0d [%0d] got %f exp %f", o, i, h2r(out[i]), e);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
