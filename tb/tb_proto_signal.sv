// tb_proto_signal: checks the congestion counters against a running sum,
// that every RX segment with payload mirrors exactly one ACK pseudo-segment
// (carrying the merge range when the gap closed and echoing CE as ECE), and
// the ACK fields written into TX segments and returning ACK pseudo-segments.
module tb_proto_signal;
  import laminar_pkg::*;
  localparam int unsigned NC = 256;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid, mir_valid;
  cp_wr_t cp_wr;
  phv_t in, out, mir;
  conn_t met_idx;
  metrics_t met;
  int checks = 0, failures = 0;
  longint unsigned s_ack [4], s_ecn [4], s_dup [4];
  int n_mir = 0, n_merge = 0;

  proto_signal #(.NUM_CONNS(NC)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic cpw(tbl_t t, int idx, logic [159:0] d);
    cp_wr = '{valid: 1'b1, tbl: t, idx: conn_t'(idx), data: d};
    @(posedge clk); #1 cp_wr = '0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cp_wr = '0; in = '0; met_idx = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 4; c++) begin
      cpw(TBL_METRICS, c, '0);
      s_ack[c] = 0; s_ecn[c] = 0; s_dup[c] = 0;
    end
    for (int k = 0; k < 3000; k++) begin
      automatic int c = $urandom_range(0, 3);
      automatic int r = $urandom_range(0, 9);
      bit e_mir;
      in = phv_clear(); in.conn = conn_t'(c); in.ctx = ctx_t'(c + 5);
      in.tuple = '{saddr: 10 + c, daddr: 20, sport: 30, dport: 40};
      in.rx_nxt = $urandom; in.avail = $urandom_range(0, 3) == 0 ? -5 : 5000; in.snd_nxt = $urandom;
      in.drop = ($urandom_range(0, 19) == 0);
      if (r < 6) begin
        in.ev = EV_RX; in.len = ($urandom_range(0, 1) == 1) ? 0 : $urandom_range(1, 1500);
        in.acked = ($urandom_range(0, 1) == 1) ? $urandom_range(1, 3000) : 0;
        in.ece = $urandom_range(0, 1); in.ce = $urandom_range(0, 1);
        in.dupack = (in.acked == 0) && ($urandom_range(0, 1) == 1);
        in.gap_closed = (in.len != 0) && ($urandom_range(0, 3) == 0);
        in.merge_len = $urandom_range(1, 9000);
        if (!in.drop) begin
          s_ack[c] += in.acked;
          if (in.ece) s_ecn[c] += in.acked;
          if (in.dupack) s_dup[c]++;
        end
      end else if (r < 8) begin
        in.ev = EV_TX; in.seq = $urandom; in.len = 1000;
      end else begin
        in.ev = EV_ACKGEN; in.seq = $urandom;
      end
      e_mir = (in.ev == EV_RX) && !in.drop && (in.len != 0);
      in_valid = 1;
      met_idx = conn_t'(c);
      @(posedge clk); #1 in_valid = 0;
      check(out_valid, "one-clock latency");
      check(mir_valid == e_mir && out.mirror == e_mir, "ACK requested exactly for RX payload");
      if (e_mir) begin
        n_mir++;
        check(mir.ev == EV_ACKGEN && mir.conn == in.conn && mir.ctx == in.ctx && mir.tuple == in.tuple, "mirror header");
        check(mir.seq == in.rx_nxt && mir.ece == in.ce, "mirror seq / ECE echo");
        check(mir.len == (in.gap_closed ? in.merge_len : 0), "merge range piggybacked");
        if (in.gap_closed) n_merge++;
      end
      if (!in.drop && (in.ev == EV_TX || in.ev == EV_ACKGEN)) begin
        check(out.ack == in.rx_nxt && out.ack_flag, "ACK number");
        check(out.wnd == ((in.avail < 0) ? 0 : in.avail), "advertised window (zero while avail < 0)");
        check(out.seq == ((in.ev == EV_ACKGEN) ? in.snd_nxt : in.seq), "sequence of outgoing header");
      end
      check(met.acked_bytes == 32'(s_ack[c]) && met.ecn_bytes == 32'(s_ecn[c]) && met.dupacks == 32'(s_dup[c]),
            "metrics");
    end
    $display("mirrors=%0d merges=%0d", n_mir, n_merge);
    check(n_mir > 0 && n_merge > 0, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
