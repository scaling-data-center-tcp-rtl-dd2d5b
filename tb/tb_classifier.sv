// tb_classifier: random events from the three sources; the expected workflow
// of each is computed by the testbench and compared, one clock later.
module tb_classifier;
  import laminar_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  ev_in_t in;
  phv_t out;
  int checks = 0, failures = 0;
  int n_rx = 0, n_none = 0, n_tx = 0, n_sh = 0, n_sg = 0;

  classifier dut (.*);
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
    ev_t exp_ev;
    in = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      in = '0;
      in.src      = src_t'($urandom_range(0, 2));
      in.ip_proto = ($urandom_range(0, 3) == 0) ? 8'd17 : 8'd6;
      in.dma_op   = dma_op_t'($urandom_range(0, 1));
      in.seq      = $urandom; in.len = $urandom_range(0, 9000);
      in.conn     = conn_t'($urandom); in.gen_idx = conn_t'($urandom);
      in.gen_tick = $urandom; in.amount = $urandom;
      in_valid    = ($urandom_range(0, 7) != 0);
      if (in.src == SRC_MAC) exp_ev = (in.ip_proto == 8'd6) ? EV_RX : EV_NONE;
      else if (in.src == SRC_DMA) exp_ev = (in.dma_op == DMA_TX_DATA) ? EV_TX : EV_SYNC_HOST;
      else exp_ev = EV_SYNC_GEN;
      @(posedge clk); #1;
      check(out_valid == in_valid, "valid delayed one clock");
      if (in_valid) begin
        check(out.ev == exp_ev, $sformatf("ev %0d exp %0d", out.ev, exp_ev));
        check(out.drop == (exp_ev == EV_NONE), "drop of non-TCP");
        check(out.seq == in.seq && out.len == in.len, "fields copied");
        if (exp_ev == EV_SYNC_GEN) check(out.conn == in.gen_idx && out.amount == in.gen_tick, "pktgen index/tick");
        else check(out.conn == in.conn && out.amount == in.amount, "conn/amount copied");
        case (exp_ev)
          EV_RX: n_rx++; EV_NONE: n_none++; EV_TX: n_tx++;
          EV_SYNC_HOST: n_sh++; default: n_sg++;
        endcase
      end
    end
    check(n_rx > 0 && n_none > 0 && n_tx > 0 && n_sh > 0 && n_sg > 0, "all workflows seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
