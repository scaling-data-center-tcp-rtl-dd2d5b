// tb_rpc_echo: echo-server workload at full scale. The data path is built
// with its default size; every one of its 32768 connections is opened,
// spread over all 1024 host contexts, and each serves one 64-byte RPC:
//   1  the client's request arrives (RX): payload is written to the
//      connection's receive buffer with a receive-head notification, and an
//      ACK pseudo-segment is mirrored and leaves as a pure ACK;
//   2  the host pushes the 64-byte response (TX): it leaves as a segment
//      carrying the piggybacked ACK;
//   3  the client acknowledges the response (RX, no payload): the host is
//      told the transmit space is free.
// That is four egress passes per RPC (RX, ACK generation, TX, ACK
// processing). Events are offered at one per two clocks, so while the
// requests arrive, egress runs fully loaded with the mirrored ACKs; the test checks that the traffic
// manager drops nothing, that every output is right for its connection
// (address, offsets, sequence and ACK numbers, context), and that the
// request-to-data latency is the same for every connection (state lookups
// take constant time whatever the connection number).
//
// Connections are placed so that connection c's 4-tuple hashes to lookup
// bucket c: the client port is chosen to fold onto the wanted hash.
// Expected values come from plain TCP arithmetic on per-connection numbers
// derived from the connection index.
module tb_rpc_echo;
  import laminar_pkg::*;

  localparam int NC   = 32768;
  localparam int NCTX = 1024;
  localparam int RPC  = 64;
  localparam int PIPE = 14;   // 4 ingress + traffic manager + 9 egress stages
  // Latency is measured from the clock the event is driven to the clock its
  // output is seen, one more than the register stages it passes.

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
  longint sent_at [NC];
  int     phase = 0;
  int     n_dma [NC];
  int     n_ack, n_seg, n_reclaim, n_egress, n_exc;
  int     lat_min = 1 << 30, lat_max = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // per-connection numbers
  function automatic logic [31:0] isn_of(int c);  return 32'h9E37_79B9 * 32'(c + 1); endfunction
  function automatic logic [31:0] iss_of(int c);  return 32'h6A09_E667 ^ (32'(c) << 7); endfunction
  function automatic logic [63:0] base_of(int c); return 64'h0000_7000_0000_0000 + (64'(c) << 20); endfunction
  function automatic ctx_t        ctx_of(int c);  return ctx_t'(c % NCTX); endfunction

  function automatic logic [14:0] fold(tuple_t t);
    logic [95:0] b;
    logic [14:0] h;
    b = t; h = '0;
    for (int i = 0; i < 96; i++) h[i % 15] ^= b[i];
    return h;
  endfunction

  // client -> server tuple of connection c, hashing to bucket c
  function automatic tuple_t peer_of(int c);
    tuple_t      t;
    logic [14:0] d;
    t = '{saddr: 32'h0a01_0000 + 32'(c / 256), daddr: 32'h0a00_0100, sport: 16'd0, dport: 16'd7};
    d = fold(t) ^ 15'(c);
    // sport bit j sits at tuple bit 16+j, which folds onto hash bit (j+1) mod 15
    for (int j = 0; j < 15; j++) t.sport[j] = d[(j + 1) % 15];
    return t;
  endfunction

  task automatic cpw(tbl_t t, int idx, logic [159:0] d);
    cp_wr = '{valid: 1'b1, tbl: t, idx: conn_t'(idx), data: d};
    @(posedge clk); #1 cp_wr = '0;
  endtask

  task automatic send(ev_in_t e);
    ev = e; ev_valid = 1;
    @(posedge clk); #1 ev_valid = 0;
  endtask

  // output monitor: checks each output against the connection it names
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (dut.v_tm) n_egress++;
      if (exc.valid) n_exc++;
      if (out_valid) begin
        automatic int c = int'(out.conn);
        automatic tuple_t p = peer_of(c);
        check(out.ctx == ctx_of(c), "context of connection");
        if (out.dest == DEST_MAC) begin
          check(out.tuple.daddr == p.saddr && out.tuple.dport == p.sport && out.tuple.sport == p.dport,
                "outgoing 4-tuple");
          check(out.ack == isn_of(c) + RPC, $sformatf("conn %0d ACK number", c));
          if (out.len == 0) begin
            n_ack++;
            check(phase == 1, "pure ACK answers the request");
            check(out.wnd == 32'(65536 - RPC), "advertised window after request");
          end else begin
            n_seg++;
            check(phase == 2 && out.len == RPC && out.seq == iss_of(c), $sformatf("conn %0d response segment", c));
          end
        end else if (out.dest == DEST_DMA) begin
          if (phase == 1) begin
            n_dma[c]++;
            check(out.len == RPC && out.dma_addr == base_of(c), $sformatf("conn %0d request DMA", c));
            check(out.notif.rx_valid && out.notif.rx_head_off == RPC, "receive head after request");
            lat_min = (int'(cyc - sent_at[c]) < lat_min) ? int'(cyc - sent_at[c]) : lat_min;
            lat_max = (int'(cyc - sent_at[c]) > lat_max) ? int'(cyc - sent_at[c]) : lat_max;
          end else begin
            n_reclaim++;
            check(phase == 3 && out.len == 0 && out.notif.tx_valid && out.notif.tx_free_off == RPC,
                  $sformatf("conn %0d transmit reclaim", c));
          end
        end else check(0, "output without destination");
      end
    end
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ev_in_t e;
    longint t0;
    cp_wr = '0; ev = '0; met_idx = '0;
    n_ack = 0; n_seg = 0; n_reclaim = 0; n_egress = 0; n_exc = 0;
    for (int c = 0; c < NC; c++) n_dma[c] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // control plane opens every connection
    for (int c = 0; c < NC; c++) begin
      automatic tuple_t p = peer_of(c);
      cpw(TBL_LOOKUP, c, 160'({1'b1, conn_t'(c), p}));
      cpw(TBL_CONN, c, 160'({1'b1, ctx_of(c)}));
      cpw(TBL_HDR, c, 160'({iss_of(c), p.daddr, p.saddr, p.dport, p.sport}));
      cpw(TBL_SCHED, c, 160'({1'b1, 5'd0, 32'd4096}));
      cpw(TBL_RX_NXT, c, 160'(isn_of(c)));
      cpw(TBL_RX_AVL, c, 160'(32'd65536));
      cpw(TBL_RX_OOO, c, '0);
      cpw(TBL_TX, c, 160'({32'd65536, iss_of(c), iss_of(c)}));
      cpw(TBL_PLACE, c, 160'({5'd16, iss_of(c), isn_of(c), base_of(c)}));
      cpw(TBL_METRICS, c, '0);
      cpw(TBL_CREDIT, c, 160'(32'd4096));
    end
    for (int c = 0; c < NC; c++) begin
      automatic tuple_t p = peer_of(c);
      check(int'(fold(p)) == c, "tuple placed in its own bucket");
    end
    repeat (5) @(posedge clk);
    #1;

    // 1: requests
    phase = 1;
    t0 = cyc;
    for (int c = 0; c < NC; c++) begin
      e = '0;
      e.src = SRC_MAC; e.tuple = peer_of(c); e.ip_proto = 8'd6;
      e.seq = isn_of(c); e.len = RPC; e.ack_flag = 1'b1; e.ack = iss_of(c); e.wnd = 32'd65536;
      sent_at[c] = cyc;
      send(e);
      @(posedge clk); #1;
    end
    repeat (100) @(posedge clk);
    #1;
    $display("requests: %0d connections in %0d clocks, latency %0d..%0d clocks",
             NC, cyc - t0, lat_min, lat_max);

    // 2: responses pushed by the host
    phase = 2;
    for (int c = 0; c < NC; c++) begin
      e = '0;
      e.src = SRC_DMA; e.dma_op = DMA_TX_DATA; e.conn = conn_t'(c); e.ctx = ctx_of(c);
      e.seq = 32'd0; e.len = RPC;
      send(e);
      @(posedge clk); #1;
    end
    repeat (100) @(posedge clk);
    #1;

    // 3: client ACKs the responses
    phase = 3;
    for (int c = 0; c < NC; c++) begin
      e = '0;
      e.src = SRC_MAC; e.tuple = peer_of(c); e.ip_proto = 8'd6;
      e.seq = isn_of(c) + RPC; e.len = 0; e.ack_flag = 1'b1; e.ack = iss_of(c) + RPC; e.wnd = 32'd65536;
      send(e);
      @(posedge clk); #1;
    end
    repeat (100) @(posedge clk);
    #1;

    begin
      automatic int missing = 0;
      for (int c = 0; c < NC; c++) if (n_dma[c] != 1) missing++;
      check(missing == 0, $sformatf("every request placed once (%0d connections wrong)", missing));
    end
    check(n_ack == NC, $sformatf("pure ACKs %0d", n_ack));
    check(n_seg == NC, $sformatf("response segments %0d", n_seg));
    check(n_reclaim == NC, $sformatf("reclaim notifications %0d", n_reclaim));
    check(n_egress == 4 * NC, $sformatf("egress passes %0d, expected 4 per RPC", n_egress));
    check(tm_ing_drops == 0 && tm_mir_drops == 0, "no traffic manager drops at full egress load");
    check(n_exc == 0, "no window exceptions");
    check(lat_min == PIPE + 1 && lat_max <= PIPE + 2,
          $sformatf("request latency %0d..%0d clocks", lat_min, lat_max));
    for (int c = 0; c < NC; c += 4099) begin
      met_idx = conn_t'(c);
      #1 check(met.acked_bytes == RPC && met.dupacks == 0, "metrics count the acknowledged response");
    end
    $display("RPCs: %0d, egress passes: %0d, TM drops: %0d", NC, n_egress, tm_ing_drops + tm_mir_drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
