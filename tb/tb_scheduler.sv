// tb_scheduler: checks that packet-generator triggers pass as SYNCs carrying
// the flow's credit exactly when the flow is active and the round number is
// a multiple of its interval, and that the resulting SYNC count per flow
// matches the configured rate over a sweep of rounds.
module tb_scheduler;
  import laminar_pkg::*;
  localparam int unsigned NC = 256;
  localparam int NF = 8;
  localparam int ROUNDS = 256;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  cp_wr_t cp_wr;
  phv_t in, out;
  int checks = 0, failures = 0;
  int log2i [NF];
  int credit [NF];
  bit active [NF];
  int syncs [NF];

  scheduler #(.NUM_CONNS(NC)) dut (.*);
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
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cp_wr = '0; in = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int f = 0; f < NF; f++) begin
      log2i[f] = f % 5; credit[f] = 1000 * (f + 1); active[f] = (f != 3); syncs[f] = 0;
      cpw(TBL_SCHED, f, 160'({active[f], 5'(log2i[f]), 32'(credit[f])}));
    end
    for (int r = 0; r < ROUNDS; r++) begin
      for (int f = 0; f < NF; f++) begin
        bit due;
        in = phv_clear(); in.ev = EV_SYNC_GEN; in.conn = conn_t'(f); in.amount = r;
        in_valid = 1;
        @(posedge clk); #1 in_valid = 0;
        due = active[f] && (r % (1 << log2i[f]) == 0);
        check(out_valid && out.drop == !due, $sformatf("flow %0d round %0d due=%0d", f, r, due));
        if (due) begin
          check(out.amount == credit[f], "credit grant");
          syncs[f]++;
        end
      end
    end
    for (int f = 0; f < NF; f++)
      check(syncs[f] == (active[f] ? ROUNDS >> log2i[f] : 0), $sformatf("SYNC rate of flow %0d", f));
    // other events pass untouched
    in = phv_clear(); in.ev = EV_RX; in.amount = 7; in_valid = 1;
    @(posedge clk); #1 in_valid = 0;
    check(!out.drop && out.amount == 7, "RX passes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
