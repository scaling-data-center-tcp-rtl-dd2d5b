// tb_data_placement: checks the sequence-to-address translation into the
// double-mapped receive buffer (including sequence wrap and segments that
// run past the buffer end, which must stay one contiguous write), the
// receive head reported with and without a closed gap, and the transmit
// offset.
module tb_data_placement;
  import laminar_pkg::*;
  localparam int unsigned NC = 256;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  cp_wr_t cp_wr;
  phv_t in, out;
  int checks = 0, failures = 0, n_wrap = 0;
  logic [63:0] base [4];
  logic [31:0] isn [4], iss [4];
  int lg [4];

  data_placement #(.NUM_CONNS(NC)) dut (.*);
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
    for (int c = 0; c < 4; c++) begin
      base[c] = {$urandom, $urandom} & ~64'hFFFFF;
      isn[c]  = (c == 0) ? 32'hFFFF_F000 : $urandom;
      iss[c]  = $urandom;
      lg[c]   = 12 + 2 * c;
      cpw(TBL_PLACE, c, 160'({5'(lg[c]), iss[c], isn[c], base[c]}));
    end
    for (int k = 0; k < 2000; k++) begin
      automatic int c = $urandom_range(0, 3);
      automatic longint unsigned size = 64'd1 << lg[c];
      longint unsigned boff;
      in = phv_clear(); in.conn = conn_t'(c); in.ev = EV_RX;
      in.acc_seq = isn[c] + $urandom; in.acc_len = $urandom_range(1, 9000);
      in.rx_nxt = isn[c] + $urandom; in.gap_closed = $urandom_range(0, 1);
      in.merge_len = $urandom_range(0, 50000); in.snd_una = iss[c] + $urandom;
      in_valid = 1;
      @(posedge clk); #1 in_valid = 0;
      boff = longint'(in.acc_seq - isn[c]) % size;
      if (boff + in.acc_len > size) n_wrap++;
      check(out_valid, "one-clock latency");
      check(out.dma_addr == base[c] + boff, $sformatf("receive address %h exp %h", out.dma_addr, base[c] + boff));
      check(out.dma_addr >= base[c] && out.dma_addr < base[c] + size, "address in first mapping");
      check(out.rx_head_off == 32'(longint'(in.rx_nxt + (in.gap_closed ? in.merge_len : 0) - isn[c]) % size),
            "receive head");
      check(out.tx_free_off == 32'(longint'(in.snd_una - iss[c]) % size), "transmit offset");
    end
    check(n_wrap > 0, "segments crossing the buffer end seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
