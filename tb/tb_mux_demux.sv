// tb_mux_demux: programs a set of connections, then checks that RX segments
// find their connection by 4-tuple, unknown tuples are dropped (also those
// that hash to an occupied bucket), host events are accepted only from the
// owning context, and packet-generator SYNCs get their flow's context. The
// bucket hash is recomputed bit by bit here.
module tb_mux_demux;
  import laminar_pkg::*;
  localparam int unsigned NC = 1024;
  localparam int NUSED = 16;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  cp_wr_t cp_wr;
  phv_t in, out;
  int checks = 0, failures = 0;
  tuple_t tup [NUSED];
  ctx_t   ctxs [NUSED];
  int     cid [NUSED];
  bit     used_bucket [NC];

  mux_demux #(.NUM_CONNS(NC)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic int bucket_of(tuple_t t);
    logic [95:0] b;
    logic [14:0] h;
    b = t; h = '0;
    for (int i = 0; i < 96; i++) h[i % 15] ^= b[i];
    return int'(h) % NC;
  endfunction

  task automatic cpw(tbl_t t, int idx, logic [159:0] d);
    cp_wr = '{valid: 1'b1, tbl: t, idx: conn_t'(idx), data: d};
    @(posedge clk); #1 cp_wr = '0;
  endtask

  task automatic send(ev_t ev, tuple_t t, int conn, ctx_t ctx, output phv_t o);
    in = phv_clear(); in.ev = ev; in.tuple = t; in.conn = conn_t'(conn); in.ctx = ctx;
    in_valid = 1;
    @(posedge clk); #1 in_valid = 0;
    check(out_valid, "one-clock latency");
    o = out;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    phv_t o;
    tuple_t t;
    int b;
    cp_wr = '0; in = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < NC; i++) begin
      used_bucket[i] = 0;
      cpw(TBL_LOOKUP, i, '0);
      cpw(TBL_CONN, i, '0);
    end
    for (int i = 0; i < NUSED; i++) begin
      do begin
        tup[i] = '{saddr: $urandom, daddr: $urandom, sport: 16'($urandom), dport: 16'($urandom)};
        b = bucket_of(tup[i]);
      end while (used_bucket[b]);
      used_bucket[b] = 1;
      cid[i]  = 100 + 37 * i;
      ctxs[i] = ctx_t'($urandom);
      cpw(TBL_LOOKUP, b, 160'({1'b1, conn_t'(cid[i]), tup[i]}));
      cpw(TBL_CONN, cid[i], 160'({1'b1, ctxs[i]}));
    end
    for (int k = 0; k < 400; k++) begin
      automatic int i = $urandom_range(0, NUSED - 1);
      send(EV_RX, tup[i], 0, '0, o);
      check(!o.drop && o.conn == conn_t'(cid[i]) && o.ctx == ctxs[i], "RX lookup");
      t = tup[i]; t.sport = t.sport ^ 16'h1;
      send(EV_RX, t, 0, '0, o);
      check(o.drop, "unknown tuple dropped");
      // Same bucket, different tuple: dport bits 0 and 15 fold onto the same
      // hash bit, so flipping both keeps the bucket but must miss.
      t = tup[i]; t.dport = t.dport ^ 16'h8001;
      check(bucket_of(t) == bucket_of(tup[i]), "colliding tuple shares bucket");
      send(EV_RX, t, 0, '0, o);
      check(o.drop, "colliding tuple dropped by tuple compare");
      send(EV_TX, '0, cid[i], ctxs[i], o);
      check(!o.drop && o.ctx == ctxs[i], "TX from owning context");
      send(EV_SYNC_HOST, '0, cid[i], ctxs[i] ^ ctx_t'(1), o);
      check(o.drop, "SYNC from foreign context dropped");
      send(EV_SYNC_GEN, '0, cid[i], '0, o);
      check(!o.drop && o.ctx == ctxs[i], "pktgen SYNC gets context");
      send(EV_SYNC_GEN, '0, cid[i] + 1, '0, o);
      check(o.drop, "pktgen SYNC for closed connection dropped");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
