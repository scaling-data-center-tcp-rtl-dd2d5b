// tb_header_transform: checks that TX payload gets seq = tx_iss + buffer
// offset (including 32-bit wrap) and that every event of a connection gets
// its outgoing 4-tuple, while dropped events are left alone.
module tb_header_transform;
  import laminar_pkg::*;
  localparam int unsigned NC = 256;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  cp_wr_t cp_wr;
  phv_t in, out;
  int checks = 0, failures = 0;
  logic [31:0] iss [8];
  tuple_t tup [8];

  header_transform #(.NUM_CONNS(NC)) dut (.*);
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
    cp_wr = '0; in = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 8; c++) begin
      iss[c] = (c == 0) ? 32'hFFFF_FF00 : $urandom;
      tup[c] = '{saddr: $urandom, daddr: $urandom, sport: 16'($urandom), dport: 16'($urandom)};
      cpw(TBL_HDR, c, 160'({iss[c], tup[c]}));
    end
    for (int k = 0; k < 1000; k++) begin
      automatic int c = $urandom_range(0, 7);
      automatic logic [31:0] offs = $urandom_range(0, 1 << 20);
      automatic ev_t ev = ($urandom_range(0, 1) == 1) ? EV_TX : EV_RX;
      automatic bit d = ($urandom_range(0, 9) == 0);
      in = phv_clear(); in.ev = ev; in.conn = conn_t'(c); in.seq = offs; in.drop = d;
      in.tuple = '{saddr: 1, daddr: 2, sport: 3, dport: 4};
      in_valid = 1;
      @(posedge clk); #1 in_valid = 0;
      check(out_valid, "one-clock latency");
      if (d) check(out.seq == offs && out.tuple == in.tuple, "dropped event untouched");
      else begin
        check(out.tuple == tup[c], "outgoing tuple");
        if (ev == EV_TX) check(out.seq == iss[c] + offs && out.ack_flag, "TX seq from offset");
        else check(out.seq == offs, "RX seq unchanged");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
