// delay_line: N-stage shift register for a W-bit word (N=0 is a wire). Used to carry
// side-band control alongside fixed-latency arithmetic pipelines. Reset clears every stage.
module delay_line #(
  parameter int unsigned W = 8,
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (N == 0) begin : g_wire
    assign q = d;
  end else begin : g_reg
    logic [W-1:0] r [N];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < int'(N); i++) r[i] <= '0;
      end else begin
        r[0] <= d;
        for (int i = 1; i < int'(N); i++) r[i] <= r[i-1];
      end
    end
    assign q = r[N-1];
  end
endmodule
