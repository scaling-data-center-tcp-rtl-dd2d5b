// classifier: ingress block 1 of the data path. Decides which workflow an
// arriving event belongs to and turns it into a header vector (PHV).
//
// A TCP segment from the MAC (IP protocol 6) becomes an RX event; any other
// MAC traffic is marked EV_NONE and dropped here (ordinary switch forwarding
// is outside this data path). A host DMA write is a TX event when it carries
// payload and a host SYNC (receive-window replenishment) otherwise. A
// packet-generator trigger becomes a credit SYNC for flow gen_idx; its round
// number travels in the amount field until the scheduler replaces it with the
// credit grant.
//
// Interface: in_valid/in (ev_in_t) -> out_valid/out (phv_t). Timing: one
// register stage, one event per clock, no back-pressure. The three event
// sources and three workflows follow the published design; the header
// encoding is this implementation's own.
module classifier
  import laminar_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  ev_in_t in,
  output logic   out_valid,
  output phv_t   out
);
  localparam logic [7:0] IP_PROTO_TCP = 8'd6;

  phv_t nxt;

  always_comb begin
    nxt          = phv_clear();
    nxt.tuple    = in.tuple;
    nxt.seq      = in.seq;
    nxt.ack      = in.ack;
    nxt.wnd      = in.wnd;
    nxt.ack_flag = in.ack_flag;
    nxt.ece      = in.ece;
    nxt.ce       = in.ce;
    nxt.len      = in.len;
    nxt.conn     = in.conn;
    nxt.ctx      = in.ctx;
    nxt.amount   = in.amount;
    unique case (in.src)
      SRC_MAC:    nxt.ev = (in.ip_proto == IP_PROTO_TCP) ? EV_RX : EV_NONE;
      SRC_DMA:    nxt.ev = (in.dma_op == DMA_TX_DATA) ? EV_TX :
                           (in.dma_op == DMA_SYNC)    ? EV_SYNC_HOST : EV_NONE;
      SRC_PKTGEN: begin
        nxt.ev     = EV_SYNC_GEN;
        nxt.conn   = in.gen_idx;
        nxt.amount = in.gen_tick;
      end
      default:    nxt.ev = EV_NONE;
    endcase
    nxt.drop = (nxt.ev == EV_NONE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid;
      out       <= nxt;
    end
  end
endmodule
