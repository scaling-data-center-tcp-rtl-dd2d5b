// tb_laminar_top: end-to-end test of the whole data path at its default
// size (32K connections). The testbench plays the remote TCP peer, the host
// library, the packet generator and the control plane, and walks through:
//   A  receive with a lost segment: out-of-order island, retransmission that
//      closes the gap, merge pseudo-segment, ACKs
//   B  duplicate segment          C  host replenishment of the window
//   D  window overrun: exception, zero window, control-plane restoration
//   E  credit SYNC, host-pushed transmission, credit exhaustion, stale data
//   F  ACK processing, transmit-buffer reclaim, three duplicate ACKs and
//      fast retransmission with halved credits
//   G  retransmission timeout signalled by SYNCs   H  unknown / non-TCP
//   I  a back-to-back burst that overflows the traffic manager
// Expected values are TCP arithmetic written out here; each mechanism is
// also counted at the block boundaries and must have happened.
module tb_laminar_top;
  import laminar_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        ev_valid = 0;
  ev_in_t      ev;
  cp_wr_t      cp_wr;
  conn_t       met_idx;
  metrics_t    met;
  logic        out_valid;
  egress_out_t out;
  exc_t        exc;
  logic [31:0] tm_ing_drops, tm_mir_drops;

  laminar_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  egress_out_t outs[$];
  exc_t        excs[$];
  longint      cyc = 0;
  longint      first_in, first_out;

  localparam int C0 = 5, C1 = 30000;
  localparam int RTO_SYNCS = 8;
  tuple_t      peer [2];
  logic [31:0] isn  [2], iss [2];
  logic [63:0] base [2];
  ctx_t        ctxv [2];
  int          cid  [2];

  // mechanism counters, sampled at block boundaries
  int n_inorder, n_ooo, n_gap, n_merge_pass, n_dup, n_oow, n_repl, n_sync_pass, n_sync_skip;
  int n_tx_sent, n_tx_nocredit, n_tx_stale, n_ack_adv, n_dupack, n_frtx, n_rto, n_unknown, n_nontcp;
  int n_rx_egress;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (out_valid) outs.push_back(out);
      if (exc.valid) excs.push_back(exc);
      if (dut.v_cls && dut.p_cls.ev == EV_NONE) n_nontcp++;
      if (dut.v_mux && dut.p_mux.ev == EV_RX && dut.p_mux.drop) n_unknown++;
      if (dut.v_sch && dut.p_sch.ev == EV_SYNC_GEN) begin
        if (dut.p_sch.drop) n_sync_skip++; else n_sync_pass++;
      end
      if (dut.v_tm && dut.p_tm.ev == EV_RX) n_rx_egress++;
      if (dut.v_rxw && !dut.p_rxw.drop) begin
        if (dut.p_rxw.in_order && !dut.p_rxw.pl_drop) n_inorder++;
        if (dut.p_rxw.ooo && !dut.p_rxw.pl_drop) n_ooo++;
        if (dut.p_rxw.gap_closed) n_gap++;
        if (dut.p_rxw.ev == EV_ACKGEN && dut.p_rxw.in_order) n_merge_pass++;
        if (dut.p_rxw.dup) n_dup++;
        if (dut.p_rxw.oow_exc) n_oow++;
        if (dut.p_rxw.ev == EV_SYNC_HOST) n_repl++;
      end
      if (dut.v_txw) begin
        if (dut.p_txw.ev == EV_TX && dut.p_txw.drop && signed'(dut.p_txw.seq + dut.p_txw.len - dut.p_txw.snd_una) <= 0) n_tx_stale++;
        if (dut.p_txw.acked != 0) n_ack_adv++;
        if (dut.p_txw.dupack) n_dupack++;
        if (dut.p_txw.fast_rtx) n_frtx++;
        if (dut.p_txw.rto) n_rto++;
      end
      if (dut.v_rate && dut.p_rate.ev == EV_TX) begin
        if (dut.p_rate.drop && signed'(dut.p_rate.seq + dut.p_rate.len - dut.p_rate.snd_una) > 0) n_tx_nocredit++;
        else if (!dut.p_rate.drop) n_tx_sent++;
      end
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  function automatic int bucket_of(tuple_t t);
    logic [95:0] b;
    logic [14:0] h;
    b = t; h = '0;
    for (int i = 0; i < 96; i++) h[i % 15] ^= b[i];
    return int'(h);
  endfunction

  task automatic cpw(tbl_t t, int idx, logic [159:0] d);
    cp_wr = '{valid: 1'b1, tbl: t, idx: conn_t'(idx), data: d};
    @(posedge clk); #1 cp_wr = '0;
  endtask

  task automatic drain(int n = 60);
    repeat (n) @(posedge clk);
    #1;
  endtask

  task automatic send(ev_in_t e);
    ev = e; ev_valid = 1;
    @(posedge clk); #1 ev_valid = 0;
  endtask

  function automatic ev_in_t seg(int k, int unsigned off, int unsigned len, int unsigned ack_off, int unsigned wnd);
    ev_in_t e;
    e = '0;
    e.src = SRC_MAC; e.tuple = peer[k]; e.ip_proto = 8'd6;
    e.seq = isn[k] + off; e.len = len; e.ack_flag = 1'b1; e.ack = iss[k] + ack_off; e.wnd = wnd;
    return e;
  endfunction

  function automatic ev_in_t host_tx(int k, int unsigned off, int unsigned len);
    ev_in_t e;
    e = '0;
    e.src = SRC_DMA; e.dma_op = DMA_TX_DATA; e.conn = conn_t'(cid[k]); e.ctx = ctxv[k];
    e.seq = off; e.len = len;
    return e;
  endfunction

  function automatic ev_in_t host_sync(int k, int unsigned amount);
    ev_in_t e;
    e = '0;
    e.src = SRC_DMA; e.dma_op = DMA_SYNC; e.conn = conn_t'(cid[k]); e.ctx = ctxv[k]; e.amount = amount;
    return e;
  endfunction

  function automatic ev_in_t trig(int k, int unsigned tick);
    ev_in_t e;
    e = '0;
    e.src = SRC_PKTGEN; e.gen_idx = conn_t'(cid[k]); e.gen_tick = tick;
    return e;
  endfunction

  // expect exactly the outputs given, in order, then clear
  task automatic expect_dma(int k, int unsigned off, int unsigned len, bit rxv, int unsigned head, string what);
    egress_out_t o;
    if (outs.size() == 0) begin check(0, {what, ": missing DMA write"}); return; end
    o = outs.pop_front();
    check(o.dest == DEST_DMA && o.ctx == ctxv[k] && o.len == len, {what, ": DMA write"});
    if (len != 0) check(o.dma_addr == base[k] + off, $sformatf("%s: DMA address %h", what, o.dma_addr));
    check(o.notif.rx_valid == rxv, {what, ": receive notification flag"});
    if (rxv) check(o.notif.rx_head_off == head, $sformatf("%s: receive head %0d exp %0d", what, o.notif.rx_head_off, head));
  endtask

  task automatic expect_ack(int k, int unsigned ack_off, int unsigned wnd, string what);
    egress_out_t o;
    if (outs.size() == 0) begin check(0, {what, ": missing ACK"}); return; end
    o = outs.pop_front();
    check(o.dest == DEST_MAC && o.len == 0 && o.tuple.daddr == peer[k].saddr && o.tuple.dport == peer[k].sport,
          {what, ": ACK header"});
    check(o.ack == isn[k] + ack_off, $sformatf("%s: ACK number %0d exp %0d", what, o.ack - isn[k], ack_off));
    check(o.wnd == wnd, $sformatf("%s: window %0d exp %0d", what, o.wnd, wnd));
  endtask

  task automatic expect_none(string what);
    check(outs.size() == 0, $sformatf("%s: %0d unexpected outputs", what, outs.size()));
    outs.delete();
  endtask

  task automatic open_conn(int k);
    int b;
    b = bucket_of(peer[k]);
    cpw(TBL_LOOKUP, b, 160'({1'b1, conn_t'(cid[k]), peer[k]}));
    cpw(TBL_CONN, cid[k], 160'({1'b1, ctxv[k]}));
    cpw(TBL_HDR, cid[k], 160'({iss[k], peer[k].daddr, peer[k].saddr, peer[k].dport, peer[k].sport}));
    cpw(TBL_SCHED, cid[k], 160'({1'b1, 5'(k), 32'd8000}));
    cpw(TBL_RX_NXT, cid[k], 160'(isn[k]));
    cpw(TBL_RX_AVL, cid[k], 160'(32'd16000));
    cpw(TBL_RX_OOO, cid[k], '0);
    cpw(TBL_TX, cid[k], 160'({32'd64000, iss[k], iss[k]}));
    cpw(TBL_PLACE, cid[k], 160'({5'd16, iss[k], isn[k], base[k]}));
    cpw(TBL_METRICS, cid[k], '0);
    cpw(TBL_CREDIT, cid[k], '0);
  endtask

  initial begin
    repeat (400_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    egress_out_t o;
    ev_in_t e;
    cp_wr = '0; ev = '0; met_idx = '0;
    cid[0] = C0; cid[1] = C1;
    for (int k = 0; k < 2; k++) begin
      peer[k] = '{saddr: 32'h0a00_0001 + k, daddr: 32'h0a00_0100, sport: 16'(40000 + k), dport: 16'd5001};
      isn[k]  = (k == 0) ? 32'hFFFF_F000 : 32'h1234_5678;   // conn 0 wraps 2^32
      iss[k]  = 32'h7000_0000 + 32'(k) * 32'h100_0000;
      base[k] = 64'h0000_7F00_0000_0000 + 64'(k) * 64'h100_0000;
      ctxv[k] = ctx_t'(3 + k * 500);
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    open_conn(0);
    open_conn(1);
    drain(5);
    outs.delete();

    // ---- A: receive with a lost segment
    first_in = cyc;
    send(seg(0, 0, 1000, 0, 64000));
    drain();
    check(outs.size() == 2, "A0: data + ACK");
    expect_dma(0, 0, 1000, 1, 1000, "A0");
    expect_ack(0, 1000, 15000, "A0");
    // segment [1000,2000) is lost
    send(seg(0, 2000, 1000, 0, 64000));
    drain();
    expect_dma(0, 2000, 1000, 0, 0, "A2 out-of-order placed");
    expect_ack(0, 1000, 15000, "A2 duplicate ACK");
    send(seg(0, 3000, 1000, 0, 64000));
    drain();
    expect_dma(0, 3000, 1000, 0, 0, "A3 island extended");
    expect_ack(0, 1000, 15000, "A3");
    send(seg(0, 1000, 1000, 0, 64000));   // retransmission closes the gap
    drain();
    expect_dma(0, 1000, 1000, 1, 4000, "A1 head reported ahead of merge");
    expect_ack(0, 4000, 12000, "A1 merged ACK");
    expect_none("A");

    // ---- B: duplicate
    send(seg(0, 0, 1000, 0, 64000));
    drain();
    expect_ack(0, 4000, 12000, "B duplicate acknowledged, not placed");
    expect_none("B");

    // ---- C: replenishment
    send(host_sync(0, 4000));
    drain();
    expect_none("C no output for host SYNC");
    send(seg(0, 4000, 1000, 0, 64000));
    drain();
    expect_dma(0, 4000, 1000, 1, 5000, "C");
    expect_ack(0, 5000, 15000, "C window grew");
    expect_none("C");

    // ---- D: window overrun
    send(seg(0, 5000, 9000, 0, 64000));
    drain();
    expect_dma(0, 5000, 9000, 1, 14000, "D0");
    expect_ack(0, 14000, 6000, "D0");
    send(seg(0, 14000, 9000, 0, 64000));   // 3000 bytes beyond the window
    drain();
    check(excs.size() == 1, "D exception raised");
    if (excs.size() == 1) begin
      check(excs[0].conn == conn_t'(C0) && excs[0].prev_nxt == isn[0] + 14000 && excs[0].prev_avail == 6000,
            "D exception contents");
      // control plane restores the state the exception reports
      cpw(TBL_RX_NXT, C0, 160'(excs[0].prev_nxt));
      cpw(TBL_RX_AVL, C0, 160'(excs[0].prev_avail));
    end
    excs.delete();
    check(outs.size() == 1, "D overrun payload not placed");
    if (outs.size() != 0) begin
      o = outs.pop_front();
      check(o.dest == DEST_MAC && o.wnd == 0, "D zero window advertised during recovery");
    end
    send(seg(0, 14000, 6000, 0, 64000));
    drain();
    expect_dma(0, 14000, 6000, 1, 20000, "D after restore");
    expect_ack(0, 20000, 0, "D window exactly used");
    send(host_sync(0, 20000));
    drain();
    expect_none("D");

    // ---- E: credits and transmission
    send(trig(0, 0));
    drain();
    check(outs.size() == 1, "E credit notification");
    if (outs.size() != 0) begin
      o = outs.pop_front();
      check(o.dest == DEST_DMA && o.ctx == ctxv[0] && o.notif.credit_valid && o.notif.credits == 8000, "E credits 8000");
    end
    for (int i = 0; i < 5; i++) send(host_tx(0, 1000 * i, 1000));
    drain();
    for (int i = 0; i < 5; i++) begin
      if (outs.size() == 0) begin check(0, "E segment missing"); break; end
      o = outs.pop_front();
      check(o.dest == DEST_MAC && o.seq == iss[0] + 1000 * i && o.len == 1000 && o.tuple.daddr == peer[0].saddr,
            $sformatf("E segment %0d", i));
      check(o.ack == isn[0] + 20000 && o.wnd == 20000, "E piggybacked ACK");
    end
    for (int i = 5; i < 9; i++) send(host_tx(0, 1000 * i, 1000));   // 3000 credits left: 3 pass
    drain();
    check(outs.size() == 3, $sformatf("E credit limit: %0d segments", outs.size()));
    outs.delete();

    // ---- F: ACK processing
    send(seg(0, 20000, 0, 2000, 64000));
    drain();
    check(outs.size() == 1, "F reclaim notification");
    if (outs.size() != 0) begin
      o = outs.pop_front();
      check(o.dest == DEST_DMA && o.len == 0 && o.notif.tx_valid && o.notif.tx_free_off == 2000, "F tx offset 2000");
    end
    send(host_tx(0, 0, 1000));   // below the cumulative ACK point
    drain();
    expect_none("F stale data dropped");
    for (int i = 0; i < 3; i++) send(seg(0, 20000, 0, 2000, 64000));
    drain();
    check(outs.size() == 1, "F only the third duplicate notifies");
    if (outs.size() != 0) begin
      o = outs.pop_front();
      check(o.notif.fast_rtx && o.notif.credit_valid && o.notif.credits == 0, "F fast retransmit, credits halved");
    end
    outs.delete();
    met_idx = conn_t'(C0);
    #1 check(met.acked_bytes == 2000 && met.dupacks == 3 && met.ecn_bytes == 0, "F metrics");

    // ---- G: timeout
    for (int t = 0; t < RTO_SYNCS + 1; t++) send(trig(0, t));
    drain();
    begin
      automatic int rtos = 0;
      foreach (outs[i]) if (outs[i].notif.rto) rtos++;
      check(outs.size() == RTO_SYNCS + 1 && rtos == 1, $sformatf("G one timeout in %0d SYNCs (%0d)", outs.size(), rtos));
    end
    outs.delete();

    // ---- H: traffic that is not ours
    e = seg(0, 0, 100, 0, 1000); e.tuple.sport ^= 16'h8000;
    send(e);
    e = seg(0, 0, 100, 0, 1000); e.ip_proto = 8'd17;
    send(e);
    send(trig(1, 1));   // flow 1 runs every 2nd round: skipped
    drain();
    expect_none("H");

    // ---- I: burst overflowing the traffic manager (every segment mirrors an ACK)
    cpw(TBL_RX_AVL, C1, 160'(32'd1_000_000));
    n_rx_egress = 0;
    for (int i = 0; i < 1200; i++) send(seg(1, 10 * i, 10, 0, 64000));
    drain(3000);
    $display("burst: %0d of 1200 segments reached egress, %0d dropped in the traffic manager",
             n_rx_egress, tm_ing_drops);
    check(tm_ing_drops > 0 && tm_ing_drops == 32'(1200 - n_rx_egress), "I drops equal segments lost");
    begin
      automatic int unsigned last_ack = 0, acks = 0, dmas = 0;
      automatic bit mono = 1;
      foreach (outs[i]) begin
        if (outs[i].dest == DEST_MAC) begin
          if (outs[i].ack - isn[1] < last_ack) mono = 0;
          last_ack = outs[i].ack - isn[1]; acks++;
        end else dmas++;
      end
      check(mono, "I ACK numbers never go back");
      check(acks == 32'(n_rx_egress), "I one ACK per segment reaching egress");
      check(last_ack > 0 && last_ack <= 12000, "I final ACK within the stream");
    end
    outs.delete();

    $display("mechanisms: inorder=%0d ooo=%0d gap_closed=%0d merge_pass=%0d dup=%0d overrun=%0d replenish=%0d",
             n_inorder, n_ooo, n_gap, n_merge_pass, n_dup, n_oow, n_repl);
    $display("            sync=%0d sync_skipped=%0d tx_sent=%0d tx_no_credit=%0d tx_stale=%0d ack_adv=%0d dupack=%0d fast_rtx=%0d rto=%0d",
             n_sync_pass, n_sync_skip, n_tx_sent, n_tx_nocredit, n_tx_stale, n_ack_adv, n_dupack, n_frtx, n_rto);
    $display("            unknown_conn=%0d non_tcp=%0d tm_drops=%0d", n_unknown, n_nontcp, tm_ing_drops);
    check(n_inorder > 0, "mechanism: in-order");
    check(n_ooo > 0, "mechanism: out-of-order island");
    check(n_gap > 0, "mechanism: gap closed");
    check(n_merge_pass > 0, "mechanism: merge pseudo-segment");
    check(n_dup > 0, "mechanism: duplicate");
    check(n_oow > 0, "mechanism: window overrun");
    check(n_repl > 0, "mechanism: replenishment");
    check(n_sync_pass > 0 && n_sync_skip > 0, "mechanism: scheduler");
    check(n_tx_sent > 0 && n_tx_nocredit > 0 && n_tx_stale > 0, "mechanism: transmission");
    check(n_ack_adv > 0 && n_dupack > 0 && n_frtx > 0 && n_rto > 0, "mechanism: ACK processing");
    check(n_unknown > 0 && n_nontcp > 0 && tm_ing_drops > 0, "mechanism: drops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
