// tb_rx_window: self-checking test of the OOO-1 receive window.
//
// A reference model keeps, per connection, next-seq, avail and the
// out-of-order island as absolute sequence numbers [isl_s, isl_e), which is
// a different formulation from the relative offsets of the design. Random
// segments around next-seq (duplicates, in order, out of order, beyond the
// window), host replenishment SYNCs and the merge pseudo-segments the design
// asks for are driven; each output is compared with the model, including its
// latency of four clocks. The testbench plays the control plane: after a
// window-overrun exception it drains the pipeline and writes back the state
// the exception reports. Every mechanism is counted and must occur.
module tb_rx_window;
  import laminar_pkg::*;

  localparam int unsigned NC  = 1024;
  localparam int          NCONN_USED = 3;
  localparam int          LAT = 4;

  logic   clk = 0, rst_n = 0;
  cp_wr_t cp_wr;
  logic   in_valid;
  phv_t   in;
  logic   out_valid;
  phv_t   out;
  exc_t   exc;

  int checks = 0, failures = 0;
  longint cyc = 0;

  rx_window #(.NUM_CONNS(NC)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // model state
  int unsigned m_nxt   [NCONN_USED];
  int          m_avail [NCONN_USED];
  bit          m_isl   [NCONN_USED];
  int unsigned m_is    [NCONN_USED];
  int unsigned m_ie    [NCONN_USED];

  typedef struct {
    longint t;
    bit in_order, ooo, dup, pl_drop, gap_closed;
    int unsigned acc_len, rx_nxt, merge_len;
    int avail;
    bit exc_v;
    int unsigned exc_nxt;
    int exc_avl;
    int conn;
  } exp_t;
  exp_t expq[$];

  typedef struct { int conn; int unsigned seq, len; } ps_t;
  ps_t pseudo_q[$];

  // mechanism counters
  int n_inorder, n_dup, n_ooo_init, n_ooo_merge, n_ooo_drop, n_oow_ooo, n_oow_exc;
  int n_gap, n_pseudo, n_pseudo_trim, n_sync, n_cover;
  exc_t excq[$];      // exceptions awaiting comparison
  exc_t restq[$];     // exceptions awaiting restoration

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  function automatic exp_t model(int c, ev_t ev, int unsigned seq, int unsigned len, int unsigned amt);
    exp_t e;
    int off, endo;
    int unsigned nn;
    e = '{default: 0};
    e.conn = c;
    if (ev == EV_SYNC_HOST) begin
      m_avail[c] += int'(amt);
      n_sync++;
    end else if (len != 0) begin
      off  = int'(seq - m_nxt[c]);
      endo = off + int'(len);
      if (endo <= 0) begin
        e.dup = 1; e.pl_drop = 1; n_dup++;
      end else if (off <= 0) begin
        e.in_order = 1;
        e.acc_len  = endo;
        nn         = m_nxt[c] + endo;
        if (m_avail[c] - endo < 0) begin
          e.pl_drop = 1; n_oow_exc++;
          if (m_avail[c] >= 0) begin
            e.exc_v = 1; e.exc_nxt = m_nxt[c]; e.exc_avl = m_avail[c];
          end
        end else if (m_isl[c]) begin
          if (int'(nn - m_ie[c]) >= 0) begin
            m_isl[c] = 0; n_cover++;
          end else if (int'(nn - m_is[c]) >= 0) begin
            e.gap_closed = 1; e.merge_len = m_ie[c] - nn; m_is[c] = nn; n_gap++;
          end
        end
        m_avail[c] -= endo;
        m_nxt[c]    = nn;
        n_inorder++;
      end else begin
        e.ooo = 1;
        if (m_avail[c] < 0 || endo > m_avail[c]) begin
          e.pl_drop = 1; n_oow_ooo++;
        end else if (!m_isl[c]) begin
          m_isl[c] = 1; m_is[c] = seq; m_ie[c] = seq + len; n_ooo_init++;
        end else if (int'(seq - m_ie[c]) <= 0 && int'(seq + len - m_is[c]) >= 0) begin
          if (int'(seq - m_is[c]) < 0) m_is[c] = seq;
          if (int'(seq + len - m_ie[c]) > 0) m_ie[c] = seq + len;
          n_ooo_merge++;
        end else begin
          e.pl_drop = 1; n_ooo_drop++;
        end
      end
    end
    e.rx_nxt = m_nxt[c];
    e.avail  = m_avail[c];
    return e;
  endfunction

  task automatic issue(int c, ev_t ev, int unsigned seq, int unsigned len, int unsigned amt);
    exp_t e;
    e = model(c, ev, seq, len, amt);
    e.t = cyc + LAT;
    expq.push_back(e);
    in          = phv_clear();
    in.ev       = ev;
    in.conn     = conn_t'(c);
    in.seq      = seq;
    in.len      = len;
    in.amount   = amt;
    in_valid    = 1'b1;
    @(posedge clk);
    #1 in_valid = 1'b0;
  endtask

  task automatic cpw(tbl_t t, int c, logic [159:0] d);
    cp_wr = '{valid: 1'b1, tbl: t, idx: conn_t'(c), data: d};
    @(posedge clk);
    #1 cp_wr = '0;
  endtask

  // monitor
  always @(posedge clk) if (rst_n) begin
    if (exc.valid) begin
      excq.push_back(exc);
      restq.push_back(exc);
    end
    if (out_valid) begin
      exp_t e;
      if (expq.size() == 0) check(0, "unexpected output");
      else begin
        e = expq.pop_front();
        check(cyc == e.t, $sformatf("latency: out at %0d expected %0d", cyc, e.t));
        check(out.in_order == e.in_order && out.ooo == e.ooo && out.dup == e.dup,
              $sformatf("class c%0d io=%0d/%0d ooo=%0d/%0d dup=%0d/%0d", e.conn,
                        out.in_order, e.in_order, out.ooo, e.ooo, out.dup, e.dup));
        check(out.pl_drop == e.pl_drop, $sformatf("pl_drop %0d exp %0d (c%0d)", out.pl_drop, e.pl_drop, e.conn));
        if (e.in_order) check(out.acc_len == e.acc_len, $sformatf("acc_len %0d exp %0d", out.acc_len, e.acc_len));
        check(out.rx_nxt == e.rx_nxt, $sformatf("rx_nxt %0d exp %0d", out.rx_nxt, e.rx_nxt));
        check(out.avail == e.avail, $sformatf("avail %0d exp %0d", out.avail, e.avail));
        check(out.gap_closed == e.gap_closed, $sformatf("gap_closed %0d exp %0d", out.gap_closed, e.gap_closed));
        if (e.gap_closed) begin
          check(out.merge_len == e.merge_len, $sformatf("merge_len %0d exp %0d", out.merge_len, e.merge_len));
          pseudo_q.push_back('{conn: e.conn, seq: out.rx_nxt, len: out.merge_len});
        end
        if (e.exc_v) begin
          // exception leaves stage 2, two clocks before the PHV leaves stage 4
          exc_t x;
          if (excq.size() == 0) check(0, "exception missing");
          else begin
            x = excq.pop_front();
            check(x.conn == conn_t'(e.conn) && x.prev_nxt == e.exc_nxt
                  && int'(x.prev_avail) == e.exc_avl, "exception contents");
          end
        end
      end
    end
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c, r;
    int unsigned seq, len;
    cp_wr = '0; in = '0; in_valid = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < NCONN_USED; i++) begin
      m_nxt[i] = 32'hFFFF_F000 + i * 1000;   // wraps during the test
      m_avail[i] = 20000; m_isl[i] = 0;
      cpw(TBL_RX_NXT, i, 160'(m_nxt[i]));
      cpw(TBL_RX_AVL, i, 160'(m_avail[i]));
      cpw(TBL_RX_OOO, i, '0);
    end
    // directed: open an island, close the gap, apply the merge
    issue(0, EV_RX, m_nxt[0] + 1000, 500, 0);      // OOO island [1000,1500)
    issue(0, EV_RX, m_nxt[0] + 1500, 200, 0);      // adjacent: extend tail
    issue(0, EV_RX, m_nxt[0], 1000, 0);            // closes the gap
    repeat (LAT + 1) @(posedge clk);
    #1;
    check(pseudo_q.size() == 1 && pseudo_q[0].len == 700, "directed merge length");
    // random phase
    for (int i = 0; i < 6000; i++) begin
      if (restq.size() != 0) begin
        repeat (LAT + 2) @(posedge clk);
        #1;
        while (restq.size() != 0) begin
          exc_t x;
          x = restq.pop_front();
          c = int'(x.conn);
          cpw(TBL_RX_NXT, c, 160'(x.prev_nxt));
          cpw(TBL_RX_AVL, c, 160'(x.prev_avail));
          m_nxt[c] = x.prev_nxt; m_avail[c] = int'(x.prev_avail);
        end
        // pseudo-segments computed from restored-away state are stale; drop
        pseudo_q.delete();
      end
      r = $urandom_range(0, 99);
      if (pseudo_q.size() != 0 && r < 60) begin
        ps_t p;
        p = pseudo_q.pop_front();
        if (int'(m_nxt[p.conn] - p.seq) > 0) n_pseudo_trim++;
        n_pseudo++;
        issue(p.conn, EV_ACKGEN, p.seq, p.len, 0);
      end else if (r >= 60 && r < 66) begin
        c = $urandom_range(0, NCONN_USED - 1);
        issue(c, EV_SYNC_HOST, 0, 0, $urandom_range(500, 4000));
      end else begin
        c   = $urandom_range(0, NCONN_USED - 1);
        len = $urandom_range(1, 1500);
        r   = $urandom_range(0, 99);
        if (r < 12)      seq = m_nxt[c] - $urandom_range(1, 3000);
        else if (r < 55) seq = m_nxt[c];
        else if (r < 62) seq = m_nxt[c] + $urandom_range(25000, 40000);
        else             seq = m_nxt[c] + $urandom_range(1, 6000);
        issue(c, EV_RX, seq, len, 0);
      end
      repeat ($urandom_range(0, 1)) @(posedge clk);
      #1;
    end
    repeat (LAT + 3) @(posedge clk);
    check(expq.size() == 0 && excq.size() == 0, "all outputs seen");
    $display("mechanisms: inorder=%0d dup=%0d ooo_init=%0d ooo_merge=%0d ooo_nonoverlap=%0d ooo_oow=%0d oow_exc=%0d gap_closed=%0d pseudo=%0d pseudo_trimmed=%0d cover=%0d sync=%0d",
             n_inorder, n_dup, n_ooo_init, n_ooo_merge, n_ooo_drop, n_oow_ooo, n_oow_exc, n_gap, n_pseudo, n_pseudo_trim, n_cover, n_sync);
    check(n_inorder > 0 && n_dup > 0 && n_ooo_init > 0 && n_ooo_merge > 0 && n_ooo_drop > 0, "coverage A");
    check(n_oow_ooo > 0 && n_oow_exc > 0 && n_gap > 0 && n_pseudo > 0 && n_sync > 0, "coverage B");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
