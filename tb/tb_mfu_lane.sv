// tb_mfu_lane: drives one MFU lane with random FP16 inputs over several row tiles and
// slots, and compares each finished dot product (plus bias) with a real-valued reference.
// Also checks the 83-cycle in-to-out latency of the first result.
module tb_mfu_lane;
  import dfx_pkg::*;
  import fp16_ref_pkg::*;
  localparam int DIM = 64, ROWS = 3, SLOTS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, first, last;
  logic [1:0] slot, out_slot;
  fp16_t bias, out;
  fp16_t [DIM-1:0] x, w;
  logic out_valid;
  mfu_lane #(.DIM(DIM), .SLOTS(SLOTS)) dut (.*);

  real expv [SLOTS];
  fp16_t xs [ROWS][DIM];
  fp16_t ws [ROWS][SLOTS][DIM];
  fp16_t bs [SLOTS];
  int cyc = 0, first_in = -1, first_out = -1, nout = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    if (first_out < 0) first_out = cyc;
    checks++;
    if (!close(h2r(out), expv[out_slot], 0.01, 0.02)) begin
      failures++;
      $display("FAIL slot %0d got %f exp %f", out_slot, h2r(out), expv[out_slot]);
    end
    nout++;
  end

  initial begin
    in_valid = 0; first = 0; last = 0; slot = 0; bias = 0; x = '0; w = '0;
    for (int s = 0; s < SLOTS; s++) begin
      bs[s] = r2h((real'($urandom_range(0, 200)) - 100.0) / 50.0);
      expv[s] = h2r(bs[s]);
    end
    for (int r = 0; r < ROWS; r++)
      for (int i = 0; i < DIM; i++) begin
        xs[r][i] = r2h((real'($urandom_range(0, 200)) - 100.0) / 100.0);
        for (int s = 0; s < SLOTS; s++) begin
          ws[r][s][i] = r2h((real'($urandom_range(0, 200)) - 100.0) / 100.0);
          expv[s] += h2r(xs[r][i]) * h2r(ws[r][s][i]);
        end
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      for (int s = 0; s < SLOTS; s++) begin
        @(negedge clk);
        if (first_in < 0) first_in = cyc;
        in_valid = 1; first = (r == 0); last = (r == ROWS - 1); slot = 2'(s);
        bias = bs[s];
        for (int i = 0; i < DIM; i++) begin x[i] = xs[r][i]; w[i] = ws[r][s][i]; end
      end
      @(negedge clk); in_valid = 0;
      repeat (8) @(negedge clk);   // respect the accumulate-loop gap
    end
    repeat (120) @(posedge clk);
    checks++;
    if (nout != SLOTS) begin failures++; $display("FAIL %0d outputs", nout); end
    checks++;
    if (first_out - first_in != 83 + 2 * 13) begin
      // first result is issued in row tile ROWS-1; tiles are 13 cycles apart
      failures++; $display("FAIL latency %0d", first_out - first_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
