// tb_mfu: one 64x16 weight tile per cycle into the 16-lane MFU; two row tiles accumulate
// per slot. Every lane's output is compared with a real-valued dot product plus bias, and
// the 83-cycle latency is checked.
module tb_mfu;
  import dfx_pkg::*;
  import fp16_ref_pkg::*;
  localparam int DIM = 64, LANES = 16, SLOTS = 4, ROWS = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, first, last, out_valid;
  logic [1:0] slot, out_slot;
  fp16_t [LANES-1:0] bias, out;
  fp16_t [DIM-1:0] x;
  fp16_t [LANES-1:0][DIM-1:0] w;
  mfu dut (.*);

  real expv [SLOTS][LANES];
  fp16_t xs [ROWS][DIM];
  fp16_t ws [ROWS][SLOTS][LANES][DIM];
  fp16_t bs [SLOTS][LANES];
  int cyc = 0, t0 = -1, t1 = -1, nout = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (rst_n && out_valid) begin
    if (t1 < 0) t1 = cyc;
    for (int l = 0; l < LANES; l++) begin
      checks++;
      if (!close(h2r(out[l]), expv[out_slot][l], 0.01, 0.02)) begin
        failures++;
        $display("FAIL slot %0d lane %0d got %f exp %f", out_slot, l, h2r(out[l]), expv[out_slot][l]);
      end
    end
    nout++;
  end
  initial begin
    in_valid = 0; first = 0; last = 0; slot = 0; bias = '0; x = '0; w = '0;
    for (int s = 0; s < SLOTS; s++)
      for (int l = 0; l < LANES; l++) begin
        bs[s][l] = r2h((real'($urandom_range(0, 200)) - 100.0) / 50.0);
        expv[s][l] = h2r(bs[s][l]);
      end
    for (int r = 0; r < ROWS; r++)
      for (int i = 0; i < DIM; i++) begin
        xs[r][i] = r2h((real'($urandom_range(0, 200)) - 100.0) / 100.0);
        for (int s = 0; s < SLOTS; s++)
          for (int l = 0; l < LANES; l++) begin
            ws[r][s][l][i] = r2h((real'($urandom_range(0, 200)) - 100.0) / 100.0);
            expv[s][l] += h2r(xs[r][i]) * h2r(ws[r][s][l][i]);
          end
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      for (int s = 0; s < SLOTS; s++) begin
        @(negedge clk);
        if (t0 < 0) t0 = cyc;
        in_valid = 1; first = (r == 0); last = (r == ROWS - 1); slot = 2'(s);
        bias = '0;
        for (int l = 0; l < LANES; l++) begin
          bias[l] = bs[s][l];
          for (int i = 0; i < DIM; i++) w[l][i] = ws[r][s][l][i];
        end
        for (int i = 0; i < DIM; i++) x[i] = xs[r][i];
      end
      @(negedge clk); in_valid = 0;
      repeat (8) @(negedge clk);
    end
    repeat (120) @(posedge clk);
    checks++; if (nout != SLOTS) begin failures++; $display("FAIL nout %0d", nout); end
    checks++; if (t1 - t0 != 83 + 13) begin failures++; $display("FAIL latency %0d", t1 - t0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
