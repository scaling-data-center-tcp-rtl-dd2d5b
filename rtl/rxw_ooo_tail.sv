// rxw_ooo_tail: third stage of the receive window (state ooo-tail, the end
// of the tracked out-of-order island as an offset from next-seq; 0 means no
// island).
//
// In-order segment accepted: the offset shrinks by the accepted length, so
// the island keeps its absolute position as next-seq advances; if the
// segment reaches past the island end, the island is cleared.
// Out-of-order segment accepted by the window check: with no island it opens
// one (tail = offset + length, ooo_init set for the next stage); if it
// starts at or before the island end it may extend the tail; if it starts
// beyond the island end it cannot touch the island and its payload is
// discarded. Extending the tail needs no knowledge of ooo-head: a segment
// that ends past the tail and starts at or before it overlaps the island.
//
// Timing: one-clock read-modify-write, registered output. Behaviour as in
// the published design (OOO-1); clearing on full coverage is this
// implementation's reading of it.
module rxw_ooo_tail
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

  logic [31:0] tail [NUM_CONNS];

  logic [31:0] cur, upd, seg_end;
  logic        we, live;
  phv_t        nxt;

  always_comb begin
    cur     = tail[IW'(in.conn)];
    upd     = cur;
    nxt     = in;
    we      = 1'b0;
    live    = in_valid && !in.drop && !in.pl_drop;
    seg_end = in.ooo_off + in.acc_len;
    if (live && in.in_order) begin
      if (cur != '0) begin
        upd = (in.acc_len >= cur) ? '0 : cur - in.acc_len;
        we  = 1'b1;
      end
    end else if (live && in.ooo) begin
      if (cur == '0) begin
        upd          = seg_end;
        nxt.ooo_init = 1'b1;
        we           = 1'b1;
      end else if (in.ooo_off <= cur) begin
        if (seg_end > cur) begin
          upd = seg_end;
          we  = 1'b1;
        end
      end else begin
        nxt.pl_drop = 1'b1;
      end
    end
    nxt.tail = upd;
  end

  always_ff @(posedge clk) begin
    if (cp_wr.valid && cp_wr.tbl == TBL_RX_OOO) tail[IW'(cp_wr.idx)] <= cp_wr.data[31:0];
    else if (we)                                tail[IW'(in.conn)]   <= upd;
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
