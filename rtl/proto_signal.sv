// proto_signal: egress block 8, protocol and congestion signalling.
//
// Metrics: for every ACK received it adds the newly acknowledged bytes to
// acked_bytes, adds them to ecn_bytes as well when the ACK echoes congestion
// (ECE), and counts duplicate ACKs. The control plane reads the counters of
// one connection through met_idx/met (combinational) for its DCTCP policy
// and clears them with TBL_METRICS.
// ACK generation: every RX segment with payload (in order, out of order,
// duplicate or out of window) asks for an ACK by setting mirror; the mirrored
// copy (mir) is an EV_ACKGEN pseudo-segment. When the receive window found
// the gap to the OOO island closed, the same pseudo-segment carries the
// merge range [next-seq, next-seq + merge_len), so the merge rides on the
// ACK. The IP congestion mark of the segment is echoed as ECE.
// Outgoing headers: a TX segment (piggybacked ACK) and a returning ACK
// pseudo-segment get ack = next-seq, window = max(avail, 0) and the current
// snd_nxt as sequence number (ACK only).
//
// Timing: one-clock read-modify-write of the counters; out and mir are
// registered together. Metrics, mirroring and merge piggybacking follow the
// published design; the counter widths and the ACK-every-segment policy
// are this implementation's. Only the table selector and index of the
// control-plane bus are used: clearing the counters carries no data.
module proto_signal
  import laminar_pkg::*;
#(
  parameter int unsigned NUM_CONNS = 32768
)(
  input  logic     clk,
  input  logic     rst_n,
  input  cp_wr_t   cp_wr,
  input  logic     in_valid,
  input  phv_t     in,
  output logic     out_valid,
  output phv_t     out,
  output logic     mir_valid,
  output phv_t     mir,
  input  conn_t    met_idx,
  output metrics_t met
);
  localparam int unsigned IW = $clog2(NUM_CONNS);

  metrics_t mtab [NUM_CONNS];
  metrics_t cur, upd;
  logic     live, we, mir_d;
  phv_t     nxt, mnxt;

  assign met = mtab[IW'(met_idx)];

  always_comb begin
    cur   = mtab[IW'(in.conn)];
    upd   = cur;
    nxt   = in;
    mnxt  = phv_clear();
    we    = 1'b0;
    mir_d = 1'b0;
    live  = in_valid && !in.drop;
    if (live && in.ev == EV_RX) begin
      if (in.acked != '0 || in.dupack) begin
        we              = 1'b1;
        upd.acked_bytes = cur.acked_bytes + in.acked;
        if (in.ece)    upd.ecn_bytes = cur.ecn_bytes + in.acked;
        if (in.dupack) upd.dupacks   = cur.dupacks + 32'd1;
      end
      if (in.len != '0) begin
        mir_d        = 1'b1;
        nxt.mirror   = 1'b1;
        mnxt.ev      = EV_ACKGEN;
        mnxt.conn    = in.conn;
        mnxt.ctx     = in.ctx;
        mnxt.tuple   = in.tuple;
        mnxt.ece     = in.ce;
        mnxt.ack_flag = 1'b1;
        mnxt.seq     = in.rx_nxt;
        mnxt.len     = in.gap_closed ? in.merge_len : '0;
      end
    end
    if (live && (in.ev == EV_TX || in.ev == EV_ACKGEN)) begin
      nxt.ack_flag = 1'b1;
      nxt.ack      = in.rx_nxt;
      nxt.wnd      = (in.avail < 0) ? 32'd0 : 32'(in.avail);
      if (in.ev == EV_ACKGEN) nxt.seq = in.snd_nxt;
    end
  end

  always_ff @(posedge clk) begin
    if (cp_wr.valid && cp_wr.tbl == TBL_METRICS) mtab[IW'(cp_wr.idx)] <= '0;
    else if (we)                                 mtab[IW'(in.conn)]   <= upd;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
      mir_valid <= 1'b0;
      mir       <= '0;
    end else begin
      out_valid <= in_valid;
      out       <= nxt;
      mir_valid <= mir_d;
      mir       <= mnxt;
    end
  end
endmodule
