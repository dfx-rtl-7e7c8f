// router: all-gather of partial results between the cores of the ring.
//
// Each core computes a slice of a result (its heads of the attention, or its columns of a
// fully-connected layer). R_SYNC with len = n makes every core send its own n vectors (put in
// the TX buffer by VSTORE) and collect all N*n vectors, in core order, in the RX buffer, from
// which VLOAD reads them back. The vectors travel as four 256-bit flits each, with no header
// (the order of arrival identifies them).
//
// The ring is used in one direction: a core sends to its right neighbour and receives from its
// left one. It first sends its own n vectors, then forwards what it receives. The k-th block of
// n vectors that arrives comes from core (id-1-k) mod N; it is stored at RX position
// origin*n + i (the reorder by core id) and forwarded to the right while k < N-2. Forwarding
// reads the stored vector back, so no extra buffer is needed. The RX buffer is marked valid
// (rx_avail) only when all (N-1)*n foreign vectors are in; a new R_SYNC clears it.
// Incoming flits wait in a FIFO until the core's own R_SYNC begins, so neighbours need not be
// in step.
// Lint notes: the TX and input FIFOs' full/count outputs are unused; TX is bounded by the
// program (at most 32 vectors per synchronization) and the input FIFO by the ring protocol.
module router
  import dfx_pkg::*;
#(
  parameter int unsigned FLIT   = 256,
  parameter int unsigned RXD    = 128,   // RX buffer, vectors
  parameter int unsigned INFIFO = 512    // input flits
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              issue,
  input  logic [15:0]       len,
  input  logic [7:0]        core_id,
  input  logic [7:0]        n_cores,
  output logic              busy,
  output logic              sync_o,      // pulses when a synchronization completes
  // TX buffer (from VSTORE)
  input  logic              tx_push,
  input  fp16_t [63:0]      tx_data,
  // RX buffer (to VLOAD)
  output logic              rx_avail,
  output fp16_t [63:0]      rx_data,
  input  logic              rx_pop,
  // ring links
  output logic              right_valid,
  output logic [FLIT-1:0]   right_data,
  input  logic              left_valid,
  input  logic [FLIT-1:0]   left_data
);
  localparam int unsigned FPV = 64 * 16 / FLIT;   // flits per vector
  localparam int unsigned RA  = $clog2(RXD);

  fp16_t [63:0] rx_ram [RXD];
  logic [15:0] n, sent, recv, rd_ptr;
  logic [7:0]  nc;
  logic [1:0]  fl_tx, fl_rx;
  logic        active, complete;

  // TX buffer
  logic         txf_empty, txf_full;
  logic [$clog2(33)-1:0] txf_count;
  fp16_t [63:0] txf_dout;
  logic         txf_pop;
  sync_fifo #(.W(64*16), .DEPTH(32)) u_tx (
    .clk, .rst_n, .clear(1'b0), .push(tx_push), .din(tx_data), .pop(txf_pop),
    .dout(txf_dout), .empty(txf_empty), .full(txf_full), .count(txf_count));

  // input flits from the left neighbour
  logic             inf_empty, inf_full;
  logic [$clog2(INFIFO+1)-1:0] inf_count;
  logic [FLIT-1:0]  inf_dout;
  logic             inf_pop;
  sync_fifo #(.W(FLIT), .DEPTH(INFIFO)) u_in (
    .clk, .rst_n, .clear(1'b0), .push(left_valid), .din(left_data), .pop(inf_pop),
    .dout(inf_dout), .empty(inf_empty), .full(inf_full), .count(inf_count));

  // ---------------- send side ----------------
  logic [15:0] total_send, total_recv, fwd_idx, fwd_blk, fwd_org;
  // own n vectors, then (N-2)*n forwarded ones; a single core only moves its own to RX
  assign total_send = (nc <= 8'd1) ? n : 16'((32'(nc) - 1) * 32'(n));
  assign total_recv = 16'((32'(nc) - 1) * 32'(n));
  assign fwd_idx = sent - n;                               // index among forwarded vectors
  always_comb begin
    fwd_blk = (n == 16'd0) ? 16'd0 : fwd_idx / n;
    fwd_org = 16'((32'(core_id) + 2 * 32'(nc) - 1 - 32'(fwd_blk)) % 32'(nc));
  end
  logic own_phase, can_send;
  logic [RA-1:0] fwd_addr;
  assign own_phase = (sent < n);
  assign fwd_addr  = RA'(32'(fwd_org) * 32'(n) + 32'(fwd_idx - fwd_blk * n));
  assign can_send  = active && (sent != total_send) &&
                     (own_phase ? !txf_empty : (recv > fwd_idx));
  fp16_t [63:0] snd_vec;
  assign snd_vec     = own_phase ? txf_dout : rx_ram[fwd_addr];
  assign right_valid = can_send && (nc > 8'd1);
  assign right_data  = snd_vec[fl_tx*(FLIT/16) +: FLIT/16];
  assign txf_pop     = can_send && own_phase && (fl_tx == 2'(FPV - 1));

  // ---------------- receive side ----------------
  logic [15:0] rblk, rorg;
  logic [RA-1:0] rx_addr;
  fp16_t [63:0] asm_q;
  always_comb begin
    rblk = (n == 16'd0) ? 16'd0 : recv / n;
    rorg = 16'((32'(core_id) + 2 * 32'(nc) - 1 - 32'(rblk)) % 32'(nc));
  end
  assign rx_addr = RA'(32'(rorg) * 32'(n) + 32'(recv - rblk * n));
  assign inf_pop = active && !inf_empty && (recv != total_recv);

  logic own_wr;
  assign own_wr = txf_pop;

  always_ff @(posedge clk) begin
    if (own_wr) rx_ram[RA'(32'(core_id) * 32'(n) + 32'(sent))] <= txf_dout;
    if (inf_pop && fl_rx == 2'(FPV - 1)) begin
      for (int f = 0; f < FPV - 1; f++)
        rx_ram[rx_addr][f*(FLIT/16) +: FLIT/16] <= asm_q[f*(FLIT/16) +: FLIT/16];
      rx_ram[rx_addr][(FPV-1)*(FLIT/16) +: FLIT/16] <= inf_dout;
    end
  end

  assign complete = active && (sent == total_send) && (recv == total_recv);
  assign busy     = active;
  assign rx_data  = rx_ram[RA'(rd_ptr)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active   <= 1'b0;
      n        <= '0;
      nc       <= 8'd1;
      sent     <= '0;
      recv     <= '0;
      fl_tx    <= '0;
      fl_rx    <= '0;
      rd_ptr   <= '0;
      rx_avail <= 1'b0;
      asm_q    <= '0;
      sync_o   <= 1'b0;
    end else begin
      sync_o <= 1'b0;
      if (issue) begin
        active   <= 1'b1;
        n        <= len;
        nc       <= n_cores;
        sent     <= '0;
        recv     <= '0;
        fl_tx    <= '0;
        fl_rx    <= '0;
        rd_ptr   <= '0;
        rx_avail <= 1'b0;
      end else begin
        if (can_send) begin
          fl_tx <= fl_tx + 2'd1;
          if (fl_tx == 2'(FPV - 1)) sent <= sent + 16'd1;
        end
        if (inf_pop) begin
          asm_q[fl_rx*(FLIT/16) +: FLIT/16] <= inf_dout;
          fl_rx <= fl_rx + 2'd1;
          if (fl_rx == 2'(FPV - 1)) recv <= recv + 16'd1;
        end
        if (complete) begin
          active   <= 1'b0;
          rx_avail <= 1'b1;
          sync_o   <= 1'b1;
        end
        if (rx_pop) rd_ptr <= rd_ptr + 16'd1;
      end
    end
  end
endmodule
