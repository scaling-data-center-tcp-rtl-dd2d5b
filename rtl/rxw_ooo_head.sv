// rxw_ooo_head: fourth stage of the receive window (state ooo-head, the
// start of the out-of-order island as an offset from next-seq).
//
// In-order segment accepted while an island is tracked: the offset shrinks
// by the accepted length. When it reaches 0 the gap before the island is
// closed, but next-seq and avail live in earlier stages, so this stage sets
// gap_closed and merge_len (= ooo-tail, the bytes from the new next-seq to
// the island end); the protocol-signalling block then mirrors a
// pseudo-segment over that range, which the earlier stages process as an
// ordinary in-order segment, and that pass clears the island. If the island
// disappeared in stage 3 (tail 0), head is cleared too.
// Out-of-order segment: a new island (ooo_init) sets head to the segment
// offset; otherwise a segment reaching the island (end >= head) pulls head
// down to its start, and one ending before it is discarded.
//
// Timing: one-clock read-modify-write, registered output. Behaviour as in
// the published design (OOO-1).
module rxw_ooo_head
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

  logic [31:0] head [NUM_CONNS];

  logic [31:0] cur, upd, seg_end;
  logic        we, live;
  phv_t        nxt;

  always_comb begin
    cur     = head[IW'(in.conn)];
    upd     = cur;
    nxt     = in;
    we      = 1'b0;
    live    = in_valid && !in.drop && !in.pl_drop;
    seg_end = in.ooo_off + in.acc_len;
    if (live && in.in_order) begin
      if (in.tail == '0) begin
        upd = '0;
        we  = (cur != '0);
      end else begin
        we = 1'b1;
        if (in.acc_len >= cur) begin
          upd            = '0;
          nxt.gap_closed = 1'b1;
          nxt.merge_len  = in.tail;
        end else begin
          upd = cur - in.acc_len;
        end
      end
    end else if (live && in.ooo) begin
      if (in.ooo_init) begin
        upd = in.ooo_off;
        we  = 1'b1;
      end else if (seg_end < cur) begin
        nxt.pl_drop = 1'b1;
      end else if (in.ooo_off < cur) begin
        upd = in.ooo_off;
        we  = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (cp_wr.valid && cp_wr.tbl == TBL_RX_OOO) head[IW'(cp_wr.idx)] <= cp_wr.data[63:32];
    else if (we)                                head[IW'(in.conn)]   <= upd;
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
