// tb_controller: runs the token loop with a model of the scheduler that answers each section
// start with sec_done after a random delay, and checks the order of sections (EMBED, LAYER x
// n_layers, HEAD from the last input token on), the layer index and token position given to
// each, the generation-stage flag, and done after n_out generated tokens.
`timescale 1ns/1ps
module tb_controller;
  import dfx_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, done, sec_start, sec_done, gen_stage;
  cfg_t cfg_in, cfg;
  logic [11:0] sec_pc; logic [7:0] layer; logic [15:0] token_pos;
  controller dut (.*);
  initial begin : watchdog
    #10_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  task automatic ck(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin
    int NIN, NOUT, NL, heads;
    NIN = 3; NOUT = 4; NL = 3; heads = 0;
    start = 0; sec_done = 0; cfg_in = '0;
    cfg_in.n_in = 16'(NIN); cfg_in.n_out = 16'(NOUT); cfg_in.n_layers = 8'(NL);
    cfg_in.pc_embed = 12'd1; cfg_in.pc_layer = 12'd20; cfg_in.pc_head = 12'd300;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int t = 0; t < NIN + NOUT - 1; t++) begin
      for (int s = 0; s < NL + 2; s++) begin
        int exp_pc;
        if (s == NL + 1 && t < NIN - 1) break;
        exp_pc = (s == 0) ? 1 : (s <= NL) ? 20 : 300;
        while (!sec_start) @(posedge clk);
        #1;
        ck(sec_pc == 12'(exp_pc), $sformatf("t %0d section %0d pc %0d", t, s, sec_pc));
        ck(token_pos == 16'(t), "token position");
        if (s >= 1 && s <= NL) ck(layer == 8'(s - 1), $sformatf("layer %0d", layer));
        ck(gen_stage == (t >= NIN - 1), "stage flag");
        if (s == NL + 1) heads++;
        repeat ($urandom % 5 + 1) @(negedge clk);
        sec_done = 1; @(negedge clk); sec_done = 0;
      end
    end
    repeat (3) @(posedge clk);
    ck(done == 1, "done");
    ck(heads == NOUT, "one LM head per output token");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
