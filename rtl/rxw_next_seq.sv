// rxw_next_seq: first stage of the receive window (state next-seq).
//
// For a segment carrying a sequence range (an RX segment with payload, or a
// merge pseudo-segment) it compares the range with next-seq:
//   * wholly below next-seq: duplicate, payload discarded (headers go on so
//     the ACK it carries is still processed and an ACK is still returned);
//   * starting at or below next-seq and ending above it: in order. The
//     duplicate prefix is trimmed and next-seq is advanced optimistically by
//     the accepted length, before the window check two stages later;
//   * starting above next-seq: out of order; the offset from next-seq is
//     passed on for the OOO stages.
// Every event carries on the updated next-seq (rx_nxt), which later stages
// use for ACK numbers and receive-buffer offsets. The control plane can
// overwrite next-seq (TBL_RX_NXT), which is how a window overrun is undone.
//
// Timing: read-modify-write of the stage-local memory in one clock, output
// registered; back-to-back events of one connection see each other's update.
// Behaviour as in the published design; widths are this implementation's.
module rxw_next_seq
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

  seq_t nxt_seq [NUM_CONNS];

  seq_t              cur, upd;
  logic signed [32:0] off, end_off;
  logic              has_range, we;
  phv_t              nxt;

  always_comb begin
    cur       = nxt_seq[IW'(in.conn)];
    upd       = cur;
    nxt       = in;
    off       = 33'(signed'(in.seq - cur));
    end_off   = off + 33'(signed'({1'b0, in.len}));
    has_range = in_valid && !in.drop && (in.ev == EV_RX || in.ev == EV_ACKGEN) && (in.len != '0);
    we        = 1'b0;
    if (has_range) begin
      if (end_off <= 0) begin
        nxt.dup     = 1'b1;
        nxt.pl_drop = 1'b1;
      end else if (off <= 0) begin
        nxt.in_order = 1'b1;
        nxt.acc_seq  = cur;
        nxt.acc_len  = len_t'(end_off);
        upd          = cur + seq_t'(end_off);
        we           = 1'b1;
      end else begin
        nxt.ooo     = 1'b1;
        nxt.ooo_off = 32'(off);
        nxt.acc_seq = in.seq;
        nxt.acc_len = in.len;
      end
    end
    nxt.rx_nxt = upd;
  end

  always_ff @(posedge clk) begin
    if (cp_wr.valid && cp_wr.tbl == TBL_RX_NXT) nxt_seq[IW'(cp_wr.idx)] <= cp_wr.data[31:0];
    else if (we)                                nxt_seq[IW'(in.conn)]   <= upd;
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
