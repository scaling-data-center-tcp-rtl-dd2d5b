// tb_rate_control: credits granted by SYNCs, spent by TX segments, halved on
// fast retransmission; TX segments beyond the credits or the peer window are
// dropped. Also measures the sending rate allowed by a fixed grant per SYNC.
module tb_rate_control;
  import laminar_pkg::*;
  localparam int unsigned NC = 256;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  cp_wr_t cp_wr;
  phv_t in, out;
  int checks = 0, failures = 0;
  longint cr [4];
  int n_grant = 0, n_send = 0, n_nocredit = 0, n_nowin = 0, n_half = 0;

  rate_control #(.NUM_CONNS(NC)) dut (.*);
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
    longint sent;
    cp_wr = '0; in = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 4; c++) begin cr[c] = 0; cpw(TBL_CREDIT, c, '0); end
    for (int k = 0; k < 4000; k++) begin
      automatic int c = $urandom_range(0, 3);
      automatic int r = $urandom_range(0, 9);
      automatic bit e_drop = 0;
      in = phv_clear(); in.conn = conn_t'(c);
      if (r < 3) begin
        in.ev = EV_SYNC_GEN; in.amount = $urandom_range(0, 4000);
        cr[c] += in.amount; n_grant++;
      end else if (r < 9) begin
        in.ev = EV_TX; in.seq = $urandom; in.len = $urandom_range(1, 1500);
        in.tx_limit = in.seq + in.len + (($urandom_range(0, 4) == 0) ? -1 : $urandom_range(0, 5000));
        if (cr[c] < in.len) begin e_drop = 1; n_nocredit++; end
        else if (int'(in.seq + in.len - in.tx_limit) > 0) begin e_drop = 1; n_nowin++; end
        else begin cr[c] -= in.len; n_send++; end
      end else begin
        in.ev = EV_RX; in.fast_rtx = $urandom_range(0, 1);
        if (in.fast_rtx) begin cr[c] = cr[c] / 2; n_half++; end
      end
      in_valid = 1;
      @(posedge clk); #1 in_valid = 0;
      check(out_valid, "one-clock latency");
      check(out.drop == e_drop, $sformatf("drop %0d exp %0d", out.drop, e_drop));
      check(out.credits == 32'(cr[c]), $sformatf("credits %0d exp %0d", out.credits, cr[c]));
    end
    // rate: 10 SYNCs of 3000 bytes allow exactly 30 segments of 1000 bytes
    cpw(TBL_CREDIT, 9, '0);
    sent = 0;
    for (int s = 0; s < 10; s++) begin
      in = phv_clear(); in.conn = 9; in.ev = EV_SYNC_GEN; in.amount = 3000; in_valid = 1;
      @(posedge clk); #1;
      for (int t = 0; t < 5; t++) begin
        in = phv_clear(); in.conn = 9; in.ev = EV_TX; in.len = 1000; in.tx_limit = 32'hFFFF; in_valid = 1;
        @(posedge clk); #1;
        if (out_valid && !out.drop && out.ev == EV_TX) sent++;
      end
      in_valid = 0;
    end
    @(posedge clk); #1;
    if (out_valid && !out.drop && out.ev == EV_TX) sent++;
    check(sent == 30, $sformatf("segments allowed by credits %0d exp 30", sent));
    $display("grant=%0d send=%0d nocredit=%0d nowin=%0d half=%0d", n_grant, n_send, n_nocredit, n_nowin, n_half);
    check(n_grant > 0 && n_send > 0 && n_nocredit > 0 && n_nowin > 0 && n_half > 0, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
