// tb_vector_regfile: writes random vectors through both write ports and reads them back on
// all three read ports, checking the data and the one-cycle read latency against a model.
`timescale 1ns/1ps
module tb_vector_regfile;
  import dfx_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [1:0] we; logic [1:0][8:0] wa; fp16_t [1:0][63:0] wd;
  logic [2:0] re; logic [2:0][8:0] ra; fp16_t [2:0][63:0] rdat;
  fp16_t [63:0] model [512];
  vector_regfile dut (.clk, .we, .waddr(wa), .wdata(wd), .re, .raddr(ra), .rdata(rdat));
  initial begin : watchdog
    #1_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  initial begin
    we = '0; re = '0; wa = '0; ra = '0; wd = '0;
    for (int a = 0; a < 512; a++) begin
      @(negedge clk);
      we = 2'b01 << (a % 2); wa = '0; wa[a % 2] = 9'(a);
      for (int e = 0; e < 64; e++) wd[a % 2][e] = 16'($urandom);
      model[a] = wd[a % 2];
    end
    @(negedge clk); we = '0;
    for (int k = 0; k < 300; k++) begin
      int p;
      p = k % 3;
      re = 3'b1 << p; ra[p] = 9'($urandom % 512);
      @(posedge clk); #1;
      re = '0;
      checks++;
      if (rdat[p] !== model[ra[p]]) begin
        failures++; $display("FAIL: port %0d addr %0d", p, ra[p]);
      end
      // data holds while re is low
      @(posedge clk); #1;
      checks++;
      if (rdat[p] !== model[ra[p]]) failures++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
