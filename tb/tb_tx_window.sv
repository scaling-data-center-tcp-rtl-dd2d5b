// tb_tx_window: random TX segments, ACKs and credit SYNCs for a few
// connections against a reference model of snd_una / snd_nxt / window /
// duplicate-ACK count / SYNC timeout counter. Checks drops of stale TX data,
// acknowledged byte counts, duplicate ACKs, fast retransmission on the third
// duplicate, timeouts and the window limit, one clock after input.
module tb_tx_window;
  import laminar_pkg::*;
  localparam int unsigned NC = 256;
  localparam int NU = 3;
  localparam int RTO_S = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  cp_wr_t cp_wr;
  phv_t in, out;
  int checks = 0, failures = 0;
  int unsigned una [NU], nxt [NU], wnd [NU], last [NU];
  int dup [NU], idle [NU];
  int n_drop = 0, n_adv = 0, n_dup = 0, n_frtx = 0, n_rto = 0, n_txadv = 0;

  tx_window #(.NUM_CONNS(NC), .DUPACK_THRESH(3), .RTO_SYNCS(RTO_S)) dut (.*);
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
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cp_wr = '0; in = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < NU; c++) begin
      una[c] = 32'hFFFF_0000 + c; nxt[c] = una[c]; wnd[c] = 65536; last[c] = una[c];
      dup[c] = 0; idle[c] = 0;
      cpw(TBL_TX, c, 160'({32'(wnd[c]), 32'(nxt[c]), 32'(una[c])}));
    end
    for (int k = 0; k < 8000; k++) begin
      automatic int c = $urandom_range(0, NU - 1);
      automatic int r = $urandom_range(0, 99);
      automatic bit e_drop = 0, e_dupack = 0, e_frtx = 0, e_rto = 0;
      automatic int unsigned e_acked = 0;
      in = phv_clear(); in.conn = conn_t'(c);
      if (r < 40) begin
        int unsigned s, l;
        l = $urandom_range(1, 1500);
        s = ($urandom_range(0, 9) == 0) ? una[c] - l - $urandom_range(0, 100)
                                         : una[c] + $urandom_range(0, nxt[c] - una[c] + 2000);
        in.ev = EV_TX; in.seq = s; in.len = l;
        if (int'(s + l - una[c]) <= 0) begin e_drop = 1; n_drop++; end
        else if (int'(s + l - nxt[c]) > 0) begin nxt[c] = s + l; n_txadv++; end
      end else if (r < 90) begin
        int unsigned a;
        automatic int q = $urandom_range(0, 9);
        a = (q < 5) ? una[c] : una[c] + $urandom_range(0, nxt[c] - una[c]);
        in.ev = EV_RX; in.ack = a; in.ack_flag = 1; in.wnd = $urandom_range(1000, 100000);
        in.len = ($urandom_range(0, 3) == 0) ? 100 : 0;
        if (int'(a - una[c]) > 0 && int'(a - nxt[c]) <= 0) begin
          e_acked = a - una[c]; una[c] = a; wnd[c] = in.wnd; dup[c] = 0; n_adv++;
        end else if (a == una[c]) begin
          wnd[c] = in.wnd;
          if (in.len == 0 && nxt[c] != una[c]) begin
            e_dupack = 1; n_dup++;
            dup[c]++;
            if (dup[c] == 3) begin e_frtx = 1; n_frtx++; end
          end
        end
      end else begin
        in.ev = EV_SYNC_GEN;
        if (nxt[c] != una[c] && una[c] == last[c]) begin
          idle[c]++;
          if (idle[c] >= RTO_S) begin e_rto = 1; idle[c] = 0; n_rto++; end
        end else idle[c] = 0;
        last[c] = una[c];
      end
      in_valid = 1;
      @(posedge clk); #1 in_valid = 0;
      check(out_valid, "one-clock latency");
      check(out.drop == e_drop, $sformatf("drop %0d exp %0d ev %0d seq %0d len %0d una %0d", out.drop, e_drop, in.ev, in.seq, in.len, una[c]));
      check(out.acked == e_acked, $sformatf("acked %0d exp %0d", out.acked, e_acked));
      check(out.dupack == e_dupack && out.fast_rtx == e_frtx, "dupack / fast retransmit");
      check(out.rto == e_rto, "timeout");
      check(out.snd_una == una[c] && out.snd_nxt == nxt[c], "snd_una / snd_nxt");
      check(out.tx_limit == una[c] + wnd[c], "window limit");
    end
    $display("mechanisms: stale_drop=%0d tx_advance=%0d ack_advance=%0d dupack=%0d fast_rtx=%0d rto=%0d",
             n_drop, n_txadv, n_adv, n_dup, n_frtx, n_rto);
    check(n_drop > 0 && n_txadv > 0 && n_adv > 0 && n_dup > 0 && n_frtx > 0 && n_rto > 0, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
