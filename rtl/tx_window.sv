// tx_window: egress block 6, transmit-window state per connection:
// snd_una (cumulative acknowledgment point), snd_nxt (highest sequence sent),
// the peer's advertised window, a duplicate-ACK counter and a timeout
// counter.
//
// TX segment: dropped if it ends at or below snd_una; if it ends beyond
// snd_nxt it advances snd_nxt. The window limit snd_una + wnd is passed on
// for the rate-control block, which enforces it.
// RX segment with ACK: an ACK above snd_una (and not beyond snd_nxt)
// advances snd_una, reports the newly acknowledged bytes, takes the new
// window and resets the duplicate count. A payload-less ACK equal to snd_una
// with data outstanding is a duplicate; the DUPACK_THRESH-th one sets
// fast_rtx (go-back-N: the host restarts from snd_una).
// Credit SYNC: if data is outstanding and snd_una has not moved since the
// previous SYNC for RTO_SYNCS SYNCs in a row, the SYNC signals a
// retransmission timeout (rto).
//
// Timing: one-clock read-modify-write, registered output. Dropping old TX
// data, advancing the window, ACK processing and the three-duplicate-ACK
// rule follow the published design; the timeout detection by SYNC counting
// is this implementation's (the design only says SYNCs signal timeouts).
module tx_window
  import laminar_pkg::*;
#(
  parameter int unsigned NUM_CONNS     = 32768,
  parameter int unsigned DUPACK_THRESH = 3,
  parameter int unsigned RTO_SYNCS     = 8
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

  typedef struct packed {
    seq_t        snd_una;
    seq_t        snd_nxt;
    logic [31:0] wnd;
    seq_t        last_una;  // snd_una seen at the previous SYNC
    logic [7:0]  dupcnt;
    logic [7:0]  idle;      // SYNCs without progress
  } txs_t;

  txs_t st [NUM_CONNS];
  txs_t cur, upd;
  seq_t seg_end;
  logic live, we;
  phv_t nxt;

  always_comb begin
    cur     = st[IW'(in.conn)];
    upd     = cur;
    nxt     = in;
    we      = 1'b0;
    live    = in_valid && !in.drop;
    seg_end = in.seq + in.len;
    if (live) begin
      unique case (in.ev)
        EV_TX: begin
          if (signed'(seg_end - cur.snd_una) <= 0) begin
            nxt.drop = 1'b1;
          end else if (signed'(seg_end - cur.snd_nxt) > 0) begin
            upd.snd_nxt = seg_end;
            we          = 1'b1;
          end
        end
        EV_RX: begin
          if (in.ack_flag) begin
            if (signed'(in.ack - cur.snd_una) > 0 && signed'(in.ack - cur.snd_nxt) <= 0) begin
              nxt.acked   = in.ack - cur.snd_una;
              upd.snd_una = in.ack;
              upd.wnd     = in.wnd;
              upd.dupcnt  = '0;
              we          = 1'b1;
            end else if (in.ack == cur.snd_una) begin
              upd.wnd = in.wnd;
              we      = 1'b1;
              if (in.len == '0 && cur.snd_nxt != cur.snd_una) begin
                nxt.dupack = 1'b1;
                if (cur.dupcnt != 8'hff) upd.dupcnt = cur.dupcnt + 8'd1;
                if (32'(cur.dupcnt) + 1 == DUPACK_THRESH) nxt.fast_rtx = 1'b1;
              end
            end
          end
        end
        EV_SYNC_GEN: begin
          we           = 1'b1;
          upd.last_una = cur.snd_una;
          if (cur.snd_nxt != cur.snd_una && cur.snd_una == cur.last_una) begin
            if (32'(cur.idle) + 1 >= RTO_SYNCS) begin
              nxt.rto  = 1'b1;
              upd.idle = '0;
            end else begin
              upd.idle = cur.idle + 8'd1;
            end
          end else begin
            upd.idle = '0;
          end
        end
        default: ;
      endcase
    end
    nxt.snd_una  = upd.snd_una;
    nxt.snd_nxt  = upd.snd_nxt;
    nxt.tx_limit = upd.snd_una + upd.wnd;
  end

  always_ff @(posedge clk) begin
    if (cp_wr.valid && cp_wr.tbl == TBL_TX)
      st[IW'(cp_wr.idx)] <= '{snd_una: cp_wr.data[31:0], snd_nxt: cp_wr.data[63:32],
                              wnd: cp_wr.data[95:64], last_una: cp_wr.data[31:0],
                              dupcnt: '0, idle: '0};
    else if (we)
      st[IW'(in.conn)] <= upd;
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
