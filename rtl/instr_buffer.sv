// instr_buffer: the instruction buffer of the control unit, DEPTH 128-bit instruction words
// written by the host before the run and read by the scheduler. Synchronous read: the word
// at raddr appears on rdata the cycle after re. DEPTH = 1024 is this design's choice; the
// paper does not size the buffer.
module instr_buffer
  import dfx_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  instr_t                   wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output instr_t                   rdata
);
  instr_t mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
