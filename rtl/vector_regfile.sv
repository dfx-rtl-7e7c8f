// vector_regfile: the vector register file of the register file manager, DEPTH entries of one
// DIM x 16-bit vector. The paper's figure shows two banks feeding two 64x16-bit operands to
// each operand collector; here every read port is its own copy of the memory (all copies take
// the same write), so the NRD read ports are independent. Two write ports, one for the
// MPU and one for the VPU; the scoreboard keeps them off the same address. Reads are synchronous: data appears the cycle after re.
// DEPTH = 512 is this design's choice; the paper does not give the size.
module vector_regfile
  import dfx_pkg::*;
#(
  parameter int unsigned DIM   = 64,
  parameter int unsigned DEPTH = 512,
  parameter int unsigned NRD   = 3
) (
  input  logic                              clk,
  input  logic [1:0]                        we,
  input  logic [1:0][$clog2(DEPTH)-1:0]    waddr,
  input  fp16_t [1:0][DIM-1:0]              wdata,
  input  logic [NRD-1:0]                    re,
  input  logic [NRD-1:0][$clog2(DEPTH)-1:0] raddr,
  output fp16_t [NRD-1:0][DIM-1:0]          rdata
);
  for (genvar p = 0; p < NRD; p++) begin : g_bank
    fp16_t [DIM-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we[0]) mem[waddr[0]] <= wdata[0];
      if (we[1]) mem[waddr[1]] <= wdata[1];
      if (re[p]) rdata[p] <= mem[raddr[p]];
    end
  end
endmodule
