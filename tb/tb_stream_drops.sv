// tb_stream_drops: byte-stream reception under random packet loss, at the
// data path's default size. One connection receives a stream of 1000-byte
// segments from a sender model that loses each data segment with a set
// probability before it reaches the pipeline; the run is repeated for
// several loss rates (0, 0.1 %, 1 % and 5 %), each on a fresh connection.
//
// Sender model (a plain TCP sender): it keeps sending new segments while
// they fit in the window the receiver last advertised, takes the cumulative
// ACKs that leave the pipeline, resends the first unacknowledged segment on
// the third duplicate ACK (once per window of data, as NewReno does: while a
// merge pseudo-segment is on its way round, newly arriving segments are
// still acknowledged with the older next-seq), and goes back to it after a quiet period with no
// progress (timeout). Host model: it consumes data as the receive head is
// reported and returns buffer space with a SYNC once more than a quarter of
// the 64 KiB receive buffer has been consumed.
//
// Checked: every placed byte lands at its offset in the double-mapped
// receive ring (base + offset mod 64 KiB) and the union of the placed
// ranges is the whole stream (retransmitted bytes that the out-of-order
// island already held are placed again, at the same address); the receive head and the ACK
// number both end at the stream length; ACK numbers never go back; no
// window exception occurs (the sender respects the window). The loss runs
// must have exercised out-of-order islands and merges. Goodput in bytes per
// clock is printed for each loss rate.
module tb_stream_drops;
  import laminar_pkg::*;

  localparam int MSS    = 1000;
  localparam int NSEG   = 1500;
  localparam int TOTAL  = MSS * NSEG;
  localparam int BUF    = 65536;
  localparam int RTO    = 600;      // sender timeout in clocks
  localparam int NRUNS  = 4;
  localparam int LOSS_PPM [NRUNS] = '{0, 1000, 10000, 50000};

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

  int     checks = 0, failures = 0;
  longint cyc = 0;

  // connection under test
  int          cid;
  ctx_t        ctx;
  tuple_t      peer;
  logic [31:0] isn, iss;
  logic [63:0] base;

  // sender state, updated by the monitor from ACKs
  int unsigned snd_una, snd_wnd, dupacks, last_progress, recover, snd_max;
  bit          do_fast_rtx;
  bit          ack_back;
  // host state
  int unsigned rx_head, consumed, returned;
  // placement check
  bit          got [TOTAL];
  int          n_overlap, n_bad_addr, n_exc, n_ooo, n_merge;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  function automatic logic [14:0] fold(tuple_t t);
    logic [95:0] b;
    logic [14:0] h;
    b = t; h = '0;
    for (int i = 0; i < 96; i++) h[i % 15] ^= b[i];
    return h;
  endfunction

  task automatic cpw(tbl_t t, int idx, logic [159:0] d);
    cp_wr = '{valid: 1'b1, tbl: t, idx: conn_t'(idx), data: d};
    @(posedge clk); #1 cp_wr = '0;
  endtask

  task automatic send(ev_in_t e);
    ev = e; ev_valid = 1;
    @(posedge clk); #1 ev_valid = 0;
    @(posedge clk); #1;          // at most one event every two clocks
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (exc.valid) n_exc++;
      if (dut.v_rxw && dut.p_rxw.conn == conn_t'(cid)) begin
        if (dut.p_rxw.ooo && !dut.p_rxw.pl_drop) n_ooo++;
        if (dut.p_rxw.gap_closed) n_merge++;
      end
      if (out_valid && out.conn == conn_t'(cid)) begin
        if (out.dest == DEST_MAC && out.len == 0) begin
          // a cumulative ACK for the sender
          automatic int unsigned a = out.ack - isn;
          if (a < snd_una) ack_back = 1;
          else if (a > snd_una) begin
            snd_una = a; dupacks = 0; last_progress = int'(cyc);
          end else begin
            dupacks++;
            // one fast retransmission per window of data (NewReno style)
            if (dupacks == 3 && snd_una >= recover) begin
              do_fast_rtx = 1;
              recover     = snd_max;
            end
          end
          snd_wnd = out.wnd;
        end else if (out.dest == DEST_DMA) begin
          if (out.len != 0) begin
            // offset of the placed bytes: the segment start, plus the
            // trimmed prefix that the ring address reveals
            automatic int unsigned s   = out.seq - isn;
            automatic int unsigned ra  = 32'(out.dma_addr - base);
            automatic int unsigned off = s + ((ra - s) & (BUF - 1));
            if (ra >= BUF) n_bad_addr++;
            for (int unsigned b = off; b < off + out.len; b++) begin
              if (b >= TOTAL) n_bad_addr++;
              else begin
                if (got[b]) n_overlap++;
                got[b] = 1;
              end
            end
          end
          if (out.notif.rx_valid) begin
            // the head is an offset in the ring: advance by the distance
            automatic int unsigned d = (out.notif.rx_head_off - rx_head) & (BUF - 1);
            rx_head  += d;
            consumed += d;
          end
        end
      end
    end
  end

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ev_in_t e;
    int unsigned snd_nxt, loss_ppm, lost, sent, rtx_fast, rtx_to;
    longint t0;
    automatic int ooo_total = 0, merge_total = 0;
    cp_wr = '0; ev = '0; met_idx = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    for (int run = 0; run < NRUNS; run++) begin
      loss_ppm = LOSS_PPM[run];
      cid  = 1000 + 7919 * run;
      ctx  = ctx_t'(17 * run + 1);
      peer = '{saddr: 32'h0a02_0000 + 32'(run), daddr: 32'h0a00_0100, sport: 16'd0, dport: 16'd4420};
      begin
        // choose the client port so the tuple lands in bucket cid
        automatic logic [14:0] d = fold(peer) ^ 15'(cid);
        for (int j = 0; j < 15; j++) peer.sport[j] = d[(j + 1) % 15];
      end
      isn  = 32'hFFF0_0000 + 32'(run) * 32'h0123_4567;   // first run wraps 2^32
      iss  = 32'h5000_0000;
      base = 64'h0000_6000_0000_0000 + (64'(run) << 24);
      cpw(TBL_LOOKUP, cid, 160'({1'b1, conn_t'(cid), peer}));
      cpw(TBL_CONN, cid, 160'({1'b1, ctx}));
      cpw(TBL_HDR, cid, 160'({iss, peer.daddr, peer.saddr, peer.dport, peer.sport}));
      cpw(TBL_SCHED, cid, 160'({1'b0, 5'd0, 32'd0}));
      cpw(TBL_RX_NXT, cid, 160'(isn));
      cpw(TBL_RX_AVL, cid, 160'(32'(BUF)));
      cpw(TBL_RX_OOO, cid, '0);
      cpw(TBL_TX, cid, 160'({32'd65536, iss, iss}));
      cpw(TBL_PLACE, cid, 160'({5'd16, iss, isn, base}));
      cpw(TBL_METRICS, cid, '0);
      cpw(TBL_CREDIT, cid, '0);

      foreach (got[b]) got[b] = 0;
      snd_una = 0; snd_wnd = BUF; dupacks = 0; recover = 0; snd_max = 0; do_fast_rtx = 0; ack_back = 0;
      rx_head = 0; consumed = 0; returned = 0;
      n_overlap = 0; n_bad_addr = 0; n_exc = 0; n_ooo = 0; n_merge = 0;
      snd_nxt = 0; lost = 0; sent = 0; rtx_fast = 0; rtx_to = 0;
      last_progress = int'(cyc);
      t0 = cyc;

      while (snd_una < TOTAL && cyc - t0 < 2_000_000) begin
        automatic bit have_seg = 0;
        automatic int unsigned seg_off = 0;
        // host gives back consumed buffer space, a quarter at a time
        if (consumed - returned > BUF / 4) begin
          e = '0;
          e.src = SRC_DMA; e.dma_op = DMA_SYNC; e.conn = conn_t'(cid); e.ctx = ctx;
          e.amount = consumed - returned;
          returned = consumed;
          send(e);
          continue;
        end
        if (do_fast_rtx) begin
          do_fast_rtx = 0;
          seg_off = snd_una; have_seg = 1; rtx_fast++;
        end else if (int'(cyc) - int'(last_progress) > RTO && snd_nxt > snd_una) begin
          snd_nxt = snd_una; last_progress = int'(cyc); rtx_to++;  // go back
        end
        if (snd_nxt < snd_una) snd_nxt = snd_una;
        if (!have_seg && snd_nxt < TOTAL && snd_nxt + MSS <= snd_una + snd_wnd) begin
          seg_off = snd_nxt; snd_nxt += MSS; have_seg = 1;
          if (snd_nxt > snd_max) snd_max = snd_nxt;
        end
        if (have_seg) begin
          sent++;
          if ($urandom_range(0, 999_999) < loss_ppm) begin
            lost++;
            @(posedge clk); #1;
          end else begin
            e = '0;
            e.src = SRC_MAC; e.tuple = peer; e.ip_proto = 8'd6;
            e.seq = isn + seg_off; e.len = MSS; e.ack_flag = 1'b1; e.ack = iss; e.wnd = 32'd65536;
            send(e);
          end
        end else begin
          @(posedge clk); #1;
        end
      end
      repeat (50) @(posedge clk);
      #1;

      begin
        automatic int holes = 0;
        foreach (got[b]) if (!got[b]) holes++;
        $display("loss %0d ppm: %0d segments sent, %0d lost, %0d fast and %0d timeout retransmissions, %0d OOO placed, %0d merges",
                 loss_ppm, sent, lost, rtx_fast, rtx_to, n_ooo, n_merge);
        $display("             %0d bytes in %0d clocks: %0d.%02d bytes/clock",
                 TOTAL, cyc - t0, longint'(TOTAL) / (cyc - t0), (longint'(TOTAL) * 100 / (cyc - t0)) % 100);
        check(snd_una == TOTAL, $sformatf("loss %0d: stream acknowledged (%0d of %0d)", loss_ppm, snd_una, TOTAL));
        check(holes == 0, $sformatf("loss %0d: every byte placed (%0d missing)", loss_ppm, holes));
        $display("             %0d bytes placed again by retransmissions", n_overlap);
        check(n_bad_addr == 0, $sformatf("loss %0d: placement addresses", loss_ppm));
        check(rx_head == TOTAL, $sformatf("loss %0d: receive head %0d", loss_ppm, rx_head));
        check(!ack_back, $sformatf("loss %0d: ACK numbers never go back", loss_ppm));
        check(n_exc == 0, $sformatf("loss %0d: no window exception", loss_ppm));
        if (loss_ppm == 0)
          check(lost == 0 && rtx_fast == 0 && rtx_to == 0 && n_overlap == 0,
                "lossless run: no retransmission, every byte placed once");
        ooo_total   += n_ooo;
        merge_total += n_merge;
      end
    end
    check(ooo_total > 0 && merge_total > 0, "loss runs exercised OOO islands and merges");
    check(tm_ing_drops == 0 && tm_mir_drops == 0, "no traffic manager drops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
