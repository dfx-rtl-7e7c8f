// scoreboard: hazard check between the instruction about to issue and those still running.
//
// As in the paper, the scoreboard keeps a bit per register address: the bit is set ("stale")
// when an instruction that writes the address issues, and cleared ("valid" again) when that
// instruction's unit reports its results written back. An instruction whose source or
// destination range touches a stale address must wait. This design adds a read lock: each
// unit's running source ranges are kept, and a new instruction may not write into them
// (write-after-read), since in-order issue alone does not stop a fast vector instruction from
// overwriting what a slow matrix instruction is still reading. Vector register ranges are
// (base, length); scalar registers are single addresses. Up to NU units may run at once.
module scoreboard #(
  parameter int unsigned VDEPTH = 512,
  parameter int unsigned SDEPTH = 64,
  parameter int unsigned NU     = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // candidate instruction
  input  logic [2:0]                src_en,      // src1 range, src2 range, scalar src
  input  logic [2:0][15:0]          src_base,
  input  logic [2:0][15:0]          src_len,     // len ignored for the scalar source
  input  logic [1:0]                dst_en,      // vector dst range, scalar dst
  input  logic [15:0]               dst_base,
  input  logic [15:0]               dst_len,
  input  logic [15:0]               sdst,
  output logic                      hazard,
  // issue and completion
  input  logic                      issue,
  input  logic [$clog2(NU)-1:0]     issue_unit,
  input  logic [NU-1:0]             unit_done
);
  logic [VDEPTH-1:0] vstale;
  logic [SDEPTH-1:0] sstale;

  // per-unit record of what it writes (to clear) and reads (to lock)
  logic [NU-1:0]       r_vd_en, r_sd_en;
  logic [NU-1:0][15:0] r_vd_base, r_vd_len, r_sd;
  logic [NU-1:0][1:0]  r_vs_en;
  logic [NU-1:0][1:0][15:0] r_vs_base, r_vs_len;

  function automatic logic [VDEPTH-1:0] vmask(input logic [15:0] base, input logic [15:0] len);
    logic [VDEPTH-1:0] m;
    for (int i = 0; i < int'(VDEPTH); i++)
      m[i] = (32'(i) >= 32'(base)) && (32'(i) < 32'(base) + 32'(len));
    return m;
  endfunction

  function automatic logic overlap(input logic [15:0] b0, input logic [15:0] l0,
                                   input logic [15:0] b1, input logic [15:0] l1);
    return (32'(b0) < 32'(b1) + 32'(l1)) && (32'(b1) < 32'(b0) + 32'(l0));
  endfunction

  always_comb begin
    hazard = 1'b0;
    for (int s = 0; s < 2; s++)
      if (src_en[s] && |(vmask(src_base[s], src_len[s]) & vstale)) hazard = 1'b1;
    if (src_en[2] && sstale[src_base[2][$clog2(SDEPTH)-1:0]]) hazard = 1'b1;
    if (dst_en[0] && |(vmask(dst_base, dst_len) & vstale)) hazard = 1'b1;
    if (dst_en[1] && sstale[sdst[$clog2(SDEPTH)-1:0]]) hazard = 1'b1;
    for (int u = 0; u < int'(NU); u++)
      for (int s = 0; s < 2; s++)
        if (dst_en[0] && r_vs_en[u][s] && overlap(dst_base, dst_len, r_vs_base[u][s], r_vs_len[u][s]))
          hazard = 1'b1;
  end

  logic [VDEPTH-1:0] vclr, vset;
  logic [SDEPTH-1:0] sclr, sset;
  always_comb begin
    vclr = '0;
    sclr = '0;
    for (int u = 0; u < int'(NU); u++)
      if (unit_done[u]) begin
        if (r_vd_en[u]) vclr = vclr | vmask(r_vd_base[u], r_vd_len[u]);
        if (r_sd_en[u]) sclr[r_sd[u][$clog2(SDEPTH)-1:0]] = 1'b1;
      end
    vset = (issue && dst_en[0]) ? vmask(dst_base, dst_len) : '0;
    sset = '0;
    if (issue && dst_en[1]) sset[sdst[$clog2(SDEPTH)-1:0]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vstale <= '0; sstale <= '0;
      r_vd_en <= '0; r_sd_en <= '0; r_vs_en <= '0;
      r_vd_base <= '0; r_vd_len <= '0; r_sd <= '0; r_vs_base <= '0; r_vs_len <= '0;
    end else begin
      vstale <= (vstale & ~vclr) | vset;
      sstale <= (sstale & ~sclr) | sset;
      for (int u = 0; u < int'(NU); u++) begin
        if (unit_done[u]) begin
          r_vd_en[u] <= 1'b0;
          r_sd_en[u] <= 1'b0;
          r_vs_en[u] <= '0;
        end
      end
      if (issue) begin
        r_vd_en[issue_unit]   <= dst_en[0];
        r_vd_base[issue_unit] <= dst_base;
        r_vd_len[issue_unit]  <= dst_len;
        r_sd_en[issue_unit]   <= dst_en[1];
        r_sd[issue_unit]      <= sdst;
        r_vs_en[issue_unit]   <= src_en[1:0];
        r_vs_base[issue_unit] <= {src_base[1], src_base[0]};
        r_vs_len[issue_unit]  <= {src_len[1], src_len[0]};
      end
    end
  end

endmodule
