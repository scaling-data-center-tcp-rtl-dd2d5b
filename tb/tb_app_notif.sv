// tb_app_notif: checks the egress decision for each event kind: DMA write
// with payload and notification for accepted RX data, notification-only
// writes for ACKs that free transmit buffer or trigger fast retransmission,
// segments and ACKs to the MAC, credit notifications for SYNCs, and nothing
// for host SYNCs, discarded payload with nothing to report, or drops.
module tb_app_notif;
  import laminar_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  phv_t in;
  egress_out_t out;
  int checks = 0, failures = 0;
  int n [3];

  app_notif dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in = '0; n[0] = 0; n[1] = 0; n[2] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      dest_t ed;
      in = phv_clear();
      in.ev = ev_t'($urandom_range(1, 5));
      in.drop = ($urandom_range(0, 9) == 0);
      in.conn = conn_t'($urandom); in.ctx = ctx_t'($urandom);
      in.seq = $urandom; in.ack = $urandom; in.wnd = $urandom; in.len = $urandom_range(0, 1500);
      in.in_order = $urandom_range(0, 1); in.ooo = !in.in_order && ($urandom_range(0, 1) == 1);
      in.pl_drop = ($urandom_range(0, 3) == 0);
      in.acc_len = $urandom_range(1, 1500); in.dma_addr = {$urandom, $urandom};
      in.rx_head_off = $urandom; in.tx_free_off = $urandom; in.credits = $urandom;
      in.acked = ($urandom_range(0, 2) == 0) ? $urandom_range(1, 100) : 0;
      in.fast_rtx = ($urandom_range(0, 9) == 0); in.rto = $urandom_range(0, 1);
      in_valid = 1;
      if (in.drop) ed = DEST_NONE;
      else case (in.ev)
        EV_RX: ed = (((in.in_order || in.ooo) && !in.pl_drop) || in.acked != 0 || in.fast_rtx) ? DEST_DMA : DEST_NONE;
        EV_TX, EV_ACKGEN: ed = DEST_MAC;
        EV_SYNC_GEN: ed = DEST_DMA;
        default: ed = DEST_NONE;
      endcase
      @(posedge clk); #1 in_valid = 0;
      check(out_valid == (ed != DEST_NONE), $sformatf("emit for ev %0d", in.ev));
      n[ed]++;
      if (ed != DEST_NONE) begin
        check(out.dest == ed && out.conn == in.conn && out.ctx == in.ctx, "destination");
        if (ed == DEST_MAC) check(out.seq == in.seq && out.ack == in.ack && out.wnd == in.wnd &&
                                  out.len == ((in.ev == EV_TX) ? in.len : 0), "TCP header");
        if (in.ev == EV_RX) begin
          automatic bit placed = (in.in_order || in.ooo) && !in.pl_drop;
          check(out.len == (placed ? in.acc_len : 0), $sformatf("payload length %0d placed %0d acc %0d", out.len, placed, in.acc_len));
          if (placed) check(out.dma_addr == in.dma_addr, "payload address");
          check(out.notif.rx_valid == (in.in_order && !in.pl_drop) && out.notif.rx_head_off == in.rx_head_off,
                "receive head notification");
          check(out.notif.tx_valid == (in.acked != 0) && out.notif.tx_free_off == in.tx_free_off,
                "transmit reclaim notification");
          check(out.notif.fast_rtx == in.fast_rtx && out.notif.credit_valid == in.fast_rtx, "fast retransmit notification");
        end
        if (in.ev == EV_SYNC_GEN)
          check(out.notif.credit_valid && out.notif.credits == in.credits && out.notif.rto == in.rto, "credit notification");
      end
    end
    check(n[0] > 0 && n[1] > 0 && n[2] > 0, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
