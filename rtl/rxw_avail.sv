// rxw_avail: second stage of the receive window (state avail, the receive
// window space left beyond next-seq, signed).
//
// In-order segment: avail is decremented by the accepted length, then the
// deferred window check is made on the new value. If it went negative the
// segment overran the advertised window: its payload is discarded and, on
// the first overrun (avail was still >= 0), an exception carrying the state
// before the segment goes to the control plane, which writes next-seq and
// avail back (TBL_RX_NXT, TBL_RX_AVL). Until then avail stays negative, so
// later segments also fail, and ACKs advertise a zero window.
// Out-of-order segment: no update; it is discarded if it ends beyond the
// window (offset + length > avail).
// Host SYNC: avail grows by the replenished bytes.
//
// Timing: one-clock read-modify-write, registered output and exception.
// Behaviour as in the published design; raising the exception only on the
// first overrun is this implementation's choice.
module rxw_avail
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
  output phv_t   out,
  output exc_t   exc
);
  localparam int unsigned IW = $clog2(NUM_CONNS);

  logic signed [31:0] avail [NUM_CONNS];

  logic signed [31:0] cur, upd;
  logic signed [32:0] ooo_end;
  logic               we, live;
  phv_t               nxt;
  exc_t               exc_d;

  always_comb begin
    cur     = avail[IW'(in.conn)];
    upd     = cur;
    nxt     = in;
    we      = 1'b0;
    exc_d   = '0;
    live    = in_valid && !in.drop;
    ooo_end = 33'(signed'({1'b0, in.ooo_off})) + 33'(signed'({1'b0, in.acc_len}));
    if (live && in.in_order) begin
      upd = cur - 32'(in.acc_len);
      we  = 1'b1;
      if (upd < 0) begin
        nxt.pl_drop = 1'b1;
        nxt.oow_exc = 1'b1;
        if (cur >= 0) begin
          exc_d.valid      = 1'b1;
          exc_d.conn       = in.conn;
          exc_d.prev_nxt   = in.rx_nxt - in.acc_len;
          exc_d.prev_avail = cur;
        end
      end
    end else if (live && in.ooo && !in.pl_drop) begin
      if (cur < 0 || ooo_end > 33'(cur)) nxt.pl_drop = 1'b1;
    end else if (live && in.ev == EV_SYNC_HOST) begin
      upd = cur + signed'(in.amount);
      we  = 1'b1;
    end
    nxt.avail = upd;
  end

  always_ff @(posedge clk) begin
    if (cp_wr.valid && cp_wr.tbl == TBL_RX_AVL) avail[IW'(cp_wr.idx)] <= signed'(cp_wr.data[31:0]);
    else if (we)                                avail[IW'(in.conn)]   <= upd;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
      exc       <= '0;
    end else begin
      out_valid <= in_valid;
      out       <= nxt;
      exc       <= exc_d;
    end
  end
endmodule
