// app_notif: egress block 10, application notification and egress output.
//
// It decides what leaves the pipeline for each event:
//   * RX segment: accepted payload is written by DMA to dma_addr in the
//     connection's context; the same write carries the notification. The
//     receive head is reported when the segment advanced next-seq (and
//     reaches to the island end when it closed the gap, ahead of the merge),
//     the acknowledged transmit offset when the ACK freed buffer space, and
//     the halved credits plus fast_rtx on a fast retransmission. A segment
//     with nothing to place but something to report becomes a
//     notification-only DMA write; otherwise nothing is emitted.
//   * TX segment: a TCP segment to the MAC with the piggybacked ACK.
//   * ACK pseudo-segment: a pure TCP ACK to the MAC.
//   * Credit SYNC: a notification with the credit balance (and rto).
//   * Host SYNC or dropped event: nothing.
//
// Timing: one register stage, no state. Which events notify follows the
// published design; the descriptor format is this implementation's. The
// header vector carries the working fields of every earlier stage; the ones
// not needed for the output are left unread here (lint reports them).
module app_notif
  import laminar_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  phv_t        in,
  output logic        out_valid,
  output egress_out_t out
);
  egress_out_t o;
  logic        placed;

  always_comb begin
    o        = '0;
    o.conn   = in.conn;
    o.ctx    = in.ctx;
    o.tuple  = in.tuple;
    o.seq    = in.seq;
    o.ack    = in.ack;
    o.wnd    = in.wnd;
    o.ece    = in.ece;
    placed   = (in.in_order || in.ooo) && !in.pl_drop;
    if (in_valid && !in.drop) begin
      unique case (in.ev)
        EV_RX: begin
          o.notif.rx_valid     = in.in_order && !in.pl_drop;
          o.notif.rx_head_off  = in.rx_head_off;
          o.notif.tx_valid     = (in.acked != '0);
          o.notif.tx_free_off  = in.tx_free_off;
          o.notif.fast_rtx     = in.fast_rtx;
          o.notif.credit_valid = in.fast_rtx;
          o.notif.credits      = in.credits;
          if (placed) begin
            o.dest     = DEST_DMA;
            o.len      = in.acc_len;
            o.dma_addr = in.dma_addr;
          end else if (o.notif.tx_valid || in.fast_rtx) begin
            o.dest     = DEST_DMA;
          end
        end
        EV_TX: begin
          o.dest = DEST_MAC;
          o.len  = in.len;
        end
        EV_ACKGEN: begin
          o.dest = DEST_MAC;
          o.len  = '0;
        end
        EV_SYNC_GEN: begin
          o.dest               = DEST_DMA;
          o.notif.credit_valid = 1'b1;
          o.notif.credits      = in.credits;
          o.notif.rto          = in.rto;
          o.notif.tx_valid     = 1'b1;
          o.notif.tx_free_off  = in.tx_free_off;
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid && (o.dest != DEST_NONE);
      out       <= o;
    end
  end
endmodule
