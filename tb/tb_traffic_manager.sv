// tb_traffic_manager: random ingress and mirror streams into small queues.
// Checks FIFO order within each stream, strict priority of mirrored
// pseudo-segments, one event per clock out, that events dropped by ingress
// are not queued, and the drop counters when the ingress queue overflows.
// (The mirror queue cannot overflow: it gains at most one entry per clock
// and is served first.)
module tb_traffic_manager;
  import laminar_pkg::*;
  localparam int D = 8, MD = 4;
  logic clk = 0, rst_n = 0;
  logic ing_valid = 0, mir_valid = 0, out_valid;
  phv_t ing, mir, out;
  logic [31:0] ing_drops, mir_drops;
  int checks = 0, failures = 0;
  int iq[$], mq[$];
  int icount = 0, mcount = 0;     // occupancy of the reference queues
  int exp_idrop = 0, exp_mdrop = 0;
  int n_prio = 0;

  traffic_manager #(.DEPTH(D), .MIR_DEPTH(MD)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: pop decision made from occupancy before this clock's pushes
  int exp_out[$];
  initial begin
    automatic int seqi = 0, seqm = 100000;
    ing = '0; mir = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < 4000; k++) begin
      bit iv, mv, idrop;
      int popped;
      iv = ($urandom_range(0, 99) < ((k / 500) % 2 ? 95 : 40));
      mv = ($urandom_range(0, 99) < ((k / 700) % 2 ? 70 : 10));
      idrop = ($urandom_range(0, 19) == 0);
      ing = phv_clear(); ing.seq = seqi; ing.drop = idrop;
      mir = phv_clear(); mir.seq = seqm;
      ing_valid = iv; mir_valid = mv;
      // reference pop (uses contents before the pushes)
      popped = -1;
      if (mq.size() != 0) begin popped = mq.pop_front(); if (iq.size() != 0) n_prio++; end
      else if (iq.size() != 0) popped = iq.pop_front();
      // reference push (full is judged before the pop, as in the design)
      if (iv && !idrop) begin
        if (icount >= D) exp_idrop++; else begin iq.push_back(seqi); end
      end
      if (mv) begin
        if (mcount >= MD) exp_mdrop++; else begin mq.push_back(seqm); end
      end
      icount = iq.size(); mcount = mq.size();
      if (iv) seqi++;
      if (mv) seqm++;
      @(posedge clk); #1;
      ing_valid = 0; mir_valid = 0;
      check(out_valid == (popped >= 0), "one event out per clock when queued");
      if (popped >= 0) check(out.seq == popped, $sformatf("order: got %0d exp %0d", out.seq, popped));
    end
    check(ing_drops == exp_idrop && mir_drops == exp_mdrop,
          $sformatf("drop counters %0d/%0d exp %0d/%0d", ing_drops, mir_drops, exp_idrop, exp_mdrop));
    $display("ingress drops=%0d mirror drops=%0d mirror-first=%0d", exp_idrop, exp_mdrop, n_prio);
    check(exp_idrop > 0 && n_prio > 0, "overflow and priority exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
