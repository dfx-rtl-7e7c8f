// tb_router: four routers joined in a ring run three all-gathers (n = 1, 2, 4 vectors per
// core). The cores start each synchronization at random, different times. Every core must
// end with all 4n vectors in core order in its RX buffer, readable only after completion.
// The cycle count of a synchronization is checked against the ring bound: each core sends
// (N-1)n vectors of 4 flits, so with aligned starts it completes in about 4(N-1)n cycles
// plus the pipeline.
`timescale 1ns/1ps
module tb_router;
  import dfx_pkg::*;
  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [N-1:0] issue, busy, sync_o, tx_push, rx_avail, rx_pop, rv;
  logic [N-1:0][15:0] len;
  fp16_t [N-1:0][63:0] tx_data, rx_data;
  logic [N-1:0][255:0] rd;
  for (genvar c = 0; c < N; c++) begin : g_r
    router u_r (.clk, .rst_n, .issue(issue[c]), .len(len[c]), .core_id(8'(c)), .n_cores(8'(N)),
      .busy(busy[c]), .sync_o(sync_o[c]), .tx_push(tx_push[c]), .tx_data(tx_data[c]),
      .rx_avail(rx_avail[c]), .rx_data(rx_data[c]), .rx_pop(rx_pop[c]),
      .right_valid(rv[c]), .right_data(rd[c]),
      .left_valid(rv[(c + N - 1) % N]), .left_data(rd[(c + N - 1) % N]));
  end
  initial begin : watchdog
    #1_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  task automatic ck(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", m); end
  endtask
  fp16_t [63:0] v [N][8];
  initial begin
    issue = '0; tx_push = '0; rx_pop = '0; len = '0; tx_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    foreach (v[c, i]) for (int e = 0; e < 64; e++) v[c][i][e] = 16'($urandom);
    for (int r = 0; r < 3; r++) begin
      int n, t0, cyc; bit aligned;
      n = 1 << r; aligned = (r == 2);
      // fill TX buffers
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        tx_push = '1;
        for (int c = 0; c < N; c++) tx_data[c] = v[c][(i + r) % 8];
      end
      @(negedge clk); tx_push = '0;
      // start: aligned, or staggered at random
      t0 = 0;
      for (int c = 0; c < N; c++) len[c] = 16'(n);
      if (aligned) begin
        issue = '1; @(negedge clk); issue = '0;
      end else
        for (int c = 0; c < N; c++) begin
          repeat ($urandom % 7) @(negedge clk);
          issue[c] = 1; @(negedge clk); issue[c] = 0;
        end
      @(negedge clk);
      ck(rx_avail == '0, "RX not readable during the synchronization");
      cyc = 2;
      while (busy != '0) begin @(negedge clk); cyc++; end
      if (aligned) begin
        $display("aligned all-gather of %0d vectors per core: %0d cycles", n, cyc);
        ck(cyc <= 4 * (N - 1) * n + 8, "synchronization latency");
      end
      ck(rx_avail == '1, "RX readable after completion");
      for (int k = 0; k < N * n; k++) begin
        for (int c = 0; c < N; c++)
          ck(rx_data[c] == v[k / n][(k % n + r) % 8], $sformatf("core %0d RX %0d", c, k));
        rx_pop = '1; @(negedge clk); rx_pop = '0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
