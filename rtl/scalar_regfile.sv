// scalar_regfile: the scalar register file of the register file manager, DEPTH 16-bit entries
// (mean, 1/sigma, row max, 1/sum ...). Two banks as in the paper's figure, realised as two
// copies of the memory so that the NRD (default two) read ports are independent; two write ports (MPU, VPU). Reads are
// synchronous (data the cycle after re). DEPTH = 64 is this design's choice.
module scalar_regfile
  import dfx_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned NRD   = 2
) (
  input  logic                            clk,
  input  logic [1:0]                      we,
  input  logic [1:0][$clog2(DEPTH)-1:0]  waddr,
  input  fp16_t [1:0]                     wdata,
  input  logic [NRD-1:0]                    re,
  input  logic [NRD-1:0][$clog2(DEPTH)-1:0] raddr,
  output fp16_t [NRD-1:0]                   rdata
);
  for (genvar p = 0; p < NRD; p++) begin : g_bank
    fp16_t mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we[0]) mem[waddr[0]] <= wdata[0];
      if (we[1]) mem[waddr[1]] <= wdata[1];
      if (re[p]) rdata[p] <= mem[raddr[p]];
    end
  end
endmodule
