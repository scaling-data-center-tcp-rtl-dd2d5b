// rate_control: egress block 9, credit-based transmission control.
//
// Each connection holds a credit balance in bytes. A credit SYNC from the
// scheduler adds its grant. A TX segment is sent only if the balance covers
// its length and it ends within the peer's advertised window
// (seq + len <= snd_una + wnd, from the transmit-window block); it then
// spends its length, otherwise it is dropped (the host overran its credits
// or the peer window, and TCP recovers the data). On fast retransmission the
// balance is halved, as TCP Reno halves its window. The balance after every
// event travels on in the PHV so the host can be told of it.
//
// Timing: one-clock read-modify-write, registered output. Credit
// enforcement, the window check and the reduction on fast retransmit follow
// the published design; halving as the reduction is this implementation's
// reading of "similar to TCP Reno".
module rate_control
  import laminar_pkg::*;
#(
  parameter int unsigned NUM_CONNS = 32768
)(
  input  logic   clk,
  input  logic   rst_n,
  input  cp_wr_t cp_wr,
  input  logic   in_valid,
  input  phv_t   in,
  output logic   out_valid,
  output phv_t   out
);
  localparam int unsigned IW = $clog2(NUM_CONNS);

  logic [31:0] credits [NUM_CONNS];
  logic [31:0] cur, upd;
  logic        live, we;
  phv_t        nxt;

  always_comb begin
    cur  = credits[IW'(in.conn)];
    upd  = cur;
    nxt  = in;
    we   = 1'b0;
    live = in_valid && !in.drop;
    if (live) begin
      unique case (in.ev)
        EV_SYNC_GEN: begin
          upd = cur + in.amount;
          we  = 1'b1;
        end
        EV_TX: begin
          if (cur >= in.len && signed'(in.seq + in.len - in.tx_limit) <= 0) begin
            upd = cur - in.len;
            we  = 1'b1;
          end else begin
            nxt.drop = 1'b1;
          end
        end
        EV_RX: begin
          if (in.fast_rtx) begin
            upd = cur >> 1;
            we  = 1'b1;
          end
        end
        default: ;
      endcase
    end
    nxt.credits = upd;
  end

  always_ff @(posedge clk) begin
    if (cp_wr.valid && cp_wr.tbl == TBL_CREDIT) credits[IW'(cp_wr.idx)] <= cp_wr.data[31:0];
    else if (we)                                credits[IW'(in.conn)]   <= upd;
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
