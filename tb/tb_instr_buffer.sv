// tb_instr_buffer: fills the instruction buffer with random instruction words and reads them
// back in random order; data must appear the cycle after the read request.
`timescale 1ns/1ps
module tb_instr_buffer;
  import dfx_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we, re; logic [9:0] wa, ra; instr_t wd, rdat;
  instr_t model [1024];
  instr_buffer dut (.clk, .we, .waddr(wa), .wdata(wd), .re, .raddr(ra), .rdata(rdat));
  initial begin : watchdog
    #1_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  initial begin
    we = 0; re = 0; wa = 0; ra = 0; wd = '0;
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk);
      we = 1; wa = 10'(a); wd = {$urandom, $urandom, $urandom, $urandom};
      model[a] = wd;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 500; k++) begin
      re = 1; ra = 10'($urandom);
      @(posedge clk); #1;
      checks++;
      if (rdat !== model[ra]) begin failures++; $display("FAIL: addr %0d", ra); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
