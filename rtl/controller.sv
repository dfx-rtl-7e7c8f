// controller: top-level sequencing of one DFX core.
//
// The host writes the system configuration (core ID, number of cores, number of decoder
// layers, number of input and output tokens, and this design's program-section addresses and
// memory strides) and pulses start. The controller then walks the text-generation schedule
// one token position t at a time, for t = 0 .. n_in + n_out - 2:
//   1. the token-embedding section of the program (WTE row of the token + WPE row of t),
//   2. the decoder-layer section, once per layer l = 0 .. n_layers-1 (the layer number selects
//      which part of HBM/DDR the DMA reads),
//   3. for t >= n_in - 1 only, the LM-head section, which produces the next token.
// Positions below n_in - 1 are the summarization stage (the context fills the Key/Value
// memory); the rest are the generation stage, each fed with the token generated before.
// Each section runs until the scheduler reports it finished (sec_done). done rises when the
// last LM head has finished and stays high until the next start.
// The section split and the token-by-token summarization are this design's choices: the paper
// says only what the configuration values decide.
module controller
  import dfx_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  cfg_t        cfg_in,
  output cfg_t        cfg,
  output logic        done,
  output logic        sec_start,
  output logic [11:0] sec_pc,
  input  logic        sec_done,
  output logic [7:0]  layer,
  output logic [15:0] token_pos,
  output logic        gen_stage
);
  typedef enum logic [2:0] {C_IDLE, C_EMB, C_LAYER, C_HEAD, C_WAIT, C_DONE} cst_e;
  cst_e st, nxt_after;

  assign gen_stage = (token_pos + 16'd1 >= cfg.n_in);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= C_IDLE;
      nxt_after <= C_IDLE;
      cfg       <= '0;
      done      <= 1'b0;
      sec_start <= 1'b0;
      sec_pc    <= '0;
      layer     <= '0;
      token_pos <= '0;
    end else begin
      sec_start <= 1'b0;
      case (st)
        C_IDLE, C_DONE: if (start) begin
          cfg       <= cfg_in;
          done      <= 1'b0;
          token_pos <= '0;
          layer     <= '0;
          st        <= C_EMB;
        end
        C_EMB: begin
          sec_start <= 1'b1;
          sec_pc    <= cfg.pc_embed;
          layer     <= '0;
          nxt_after <= C_LAYER;
          st        <= C_WAIT;
        end
        C_LAYER: begin
          sec_start <= 1'b1;
          sec_pc    <= cfg.pc_layer;
          nxt_after <= (layer + 8'd1 < cfg.n_layers) ? C_LAYER : C_HEAD;
          st        <= C_WAIT;
        end
        C_HEAD: begin
          if (token_pos + 16'd1 >= cfg.n_in) begin
            sec_start <= 1'b1;
            sec_pc    <= cfg.pc_head;
            nxt_after <= C_EMB;
            st        <= C_WAIT;
          end else begin
            token_pos <= token_pos + 16'd1;
            st        <= C_EMB;
          end
        end
        C_WAIT: if (sec_done) begin
          if (nxt_after == C_LAYER && sec_pc == cfg.pc_layer) layer <= layer + 8'd1;
          if (nxt_after == C_EMB) begin
            // LM head finished: next position or end of the run
            if (32'(token_pos) + 32'd2 >= 32'(cfg.n_in) + 32'(cfg.n_out)) begin
              st   <= C_DONE;
              done <= 1'b1;
            end else begin
              token_pos <= token_pos + 16'd1;
              st        <= C_EMB;
            end
          end else begin
            st <= nxt_after;
          end
        end
        default: st <= C_IDLE;
      endcase
    end
  end
endmodule
