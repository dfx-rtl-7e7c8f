// fp16_adder_tree: pipelined sum of N FP16 values by a log2(N)-deep tree of FP16 adders
// (N a power of two). One vector can enter per cycle; the sum appears log2(N)*ADD_LAT cycles
// later (66 at N = 64). Used for the accumulation in SFU_V.
module fp16_adder_tree
  import dfx_pkg::*;
#(
  parameter int unsigned N       = 64,
  parameter int unsigned ADD_LAT = 11
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  fp16_t [N-1:0] in,
  output logic          out_valid,
  output fp16_t         sum
);
  if (N == 1) begin : g_one
    assign out_valid = in_valid;
    assign sum       = in[0];
  end else begin : g_tree
    fp16_t [N/2-1:0] lo;
    logic            v [N/2];
    for (genvar k = 0; k < N/2; k++) begin : g_add
      fp16_add #(.LAT(ADD_LAT)) u_add (.clk, .rst_n, .in_valid, .sub(1'b0), .a(in[2*k]),
                                       .b(in[2*k+1]), .out_valid(v[k]), .y(lo[k]));
    end
    fp16_adder_tree #(.N(N/2), .ADD_LAT(ADD_LAT)) u_next (
      .clk, .rst_n, .in_valid(v[0]), .in(lo), .out_valid, .sum);
  end
endmodule
