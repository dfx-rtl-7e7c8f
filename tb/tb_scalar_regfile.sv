// tb_scalar_regfile: random writes on both write ports, reads on both read ports, checked
// against a model one cycle after the read request.
`timescale 1ns/1ps
module tb_scalar_regfile;
  import dfx_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [1:0] we; logic [1:0][5:0] wa; fp16_t [1:0] wd;
  logic [1:0] re; logic [1:0][5:0] ra; fp16_t [1:0] rdat;
  fp16_t model [64];
  scalar_regfile dut (.clk, .we, .waddr(wa), .wdata(wd), .re, .raddr(ra), .rdata(rdat));
  initial begin : watchdog
    #1_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  initial begin
    we = '0; re = '0; wa = '0; ra = '0; wd = '0;
    for (int a = 0; a < 64; a += 2) begin
      @(negedge clk);
      we = 2'b11; wa[0] = 6'(a); wa[1] = 6'(a + 1);
      wd[0] = 16'($urandom); wd[1] = 16'($urandom);
      model[a] = wd[0]; model[a + 1] = wd[1];
    end
    @(negedge clk); we = '0;
    for (int k = 0; k < 200; k++) begin
      re = 2'b11; ra[0] = 6'($urandom); ra[1] = 6'($urandom);
      @(posedge clk); #1;
      for (int p = 0; p < 2; p++) begin
        checks++;
        if (rdat[p] !== model[ra[p]]) begin failures++; $display("FAIL: port %0d", p); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
