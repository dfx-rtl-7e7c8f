// tb_fp16_ops: checks the FP16 multiplier, adder/subtractor, exponential and
// reciprocal / reciprocal-square-root operators against real arithmetic, and checks each
// operator's latency (6, 11, 4 and 8 cycles).
module tb_fp16_ops;
  import dfx_pkg::*;
  import fp16_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  iv, sub, rs;
  fp16_t a, b;
  logic  mv, av, ev, rv;
  fp16_t my, ay, ey, ry;
  fp16_mul u_mul (.clk, .rst_n, .in_valid(iv), .a, .b, .out_valid(mv), .y(my));
  fp16_add u_add (.clk, .rst_n, .in_valid(iv), .sub, .a, .b, .out_valid(av), .y(ay));
  fp16_exp u_exp (.clk, .rst_n, .in_valid(iv), .a, .out_valid(ev), .y(ey));
  fp16_rcp u_rcp (.clk, .rst_n, .in_valid(iv), .rsqrt(rs), .a, .out_valid(rv), .y(ry));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input fp16_t got, input real exp, input real rel);
    checks++;
    if (!close(h2r(got), exp, rel, 1.0e-4)) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h (%f) expected %f", what, got, h2r(got), exp);
    end
  endtask

  task automatic apply(input fp16_t x, input fp16_t y, input logic s, input logic r,
                       output fp16_t om, output fp16_t oa, output fp16_t oe, output fp16_t orc);
    int c;
    @(negedge clk);
    a = x; b = y; sub = s; rs = r; iv = 1;
    @(negedge clk);
    iv = 0;
    c = 2;
    om = 0; oa = 0; oe = 0; orc = 0;
    while (c < 13) begin
      @(posedge clk); #1;
      if (ev) begin oe = ey; checks++; if (c != 4) begin failures++; $display("exp latency %0d", c); end end
      if (mv) begin om = my; checks++; if (c != 6) begin failures++; $display("mul latency %0d", c); end end
      if (rv) begin orc = ry; checks++; if (c != 8) begin failures++; $display("rcp latency %0d", c); end end
      if (av) begin oa = ay; checks++; if (c != 11) begin failures++; $display("add latency %0d", c); end end
      c++;
    end
  endtask

  initial begin
    fp16_t om, oa, oe, orc;
    real x, y;
    iv = 0; a = 0; b = 0; sub = 0; rs = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      x = (real'($urandom_range(0, 20000)) - 10000.0) / 1000.0;
      y = (real'($urandom_range(0, 20000)) - 10000.0) / 1000.0;
      if (k % 3 == 0) y = y / 64.0;
      x = h2r(r2h(x)); y = h2r(r2h(y));
      apply(r2h(x), r2h(y), k[0], k[1], om, oa, oe, orc);
      chk("mul", om, x * y, 1.0e-3);
      chk(k[0] ? "sub" : "add", oa, k[0] ? x - y : x + y, 2.0e-3);
      if (x < 10.0) chk("exp", oe, $exp(x), 3.0e-3);
      if (k[1]) begin
        if (x > 0.0) chk("rsqrt", orc, 1.0 / $sqrt(x), 2.0e-3);
      end else if (x != 0.0) chk("recip", orc, 1.0 / x, 2.0e-3);
    end
    // exact cases
    apply(16'h3C00, 16'h3C00, 1'b0, 1'b1, om, oa, oe, orc);   // 1*1, 1+1, e^1, rsqrt 1
    checks++; if (om != 16'h3C00) failures++;
    checks++; if (oa != 16'h4000) failures++;
    checks++; if (orc != 16'h3C00) failures++;
    apply(16'h4400, 16'h4400, 1'b1, 1'b0, om, oa, oe, orc);   // 4*4, 4-4, recip 4
    checks++; if (om != 16'h4C00) failures++;
    checks++; if (oa != 16'h0000) failures++;
    checks++; if (orc != 16'h3400) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
