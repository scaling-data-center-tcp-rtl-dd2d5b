// scheduler: ingress block 3. Turns packet-generator triggers into credit
// SYNCs for flows, at each flow's configured rate.
//
// The packet generator sweeps the flow indices round after round and stamps
// each trigger with its round number. For every flow the control plane sets,
// through cp_wr (TBL_SCHED), whether it is active, the SYNC interval as a
// power of two of rounds, and the credit bytes granted per SYNC. A trigger
// passes as a SYNC carrying the grant when the flow is active and the round
// number is a multiple of the interval; otherwise it is dropped. The rate of
// a flow is therefore credits / (2^interval rounds). Pausing idle flows and
// lowering the SYNC frequency of lightly loaded ones are control-plane
// writes to the same table. Other events pass unchanged.
//
// Timing: one register stage, one event per clock. The block is stateless
// per packet (ingress is read-only), which is this implementation's way of
// meeting that rule of the published design; the table layout is its own.
module scheduler
  import laminar_pkg::*;
#(
  parameter int unsigned NUM_CONNS = 32768
)(
  input  logic   clk,
  input  logic   rst_n,
  input  cp_wr_t cp_wr,
  input  logic   in_valid,
  input  phv_t   in,
  output logic   out_valid,
  output phv_t   out
);
  localparam int unsigned IW = $clog2(NUM_CONNS);

  typedef struct packed {
    logic        active;
    logic [4:0]  log2_int;
    logic [31:0] credit;
  } sched_t;

  sched_t sched [NUM_CONNS];
  sched_t se;
  logic [31:0] mask;
  phv_t nxt;

  always_comb begin
    se   = sched[IW'(in.conn)];
    mask = (32'd1 << se.log2_int) - 32'd1;
    nxt  = in;
    if (in.ev == EV_SYNC_GEN && !in.drop) begin
      if (se.active && ((in.amount & mask) == 32'd0)) nxt.amount = se.credit;
      else                                            nxt.drop   = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (cp_wr.valid && cp_wr.tbl == TBL_SCHED)
      sched[IW'(cp_wr.idx)] <= sched_t'(cp_wr.data[$bits(sched_t)-1:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid;
      out       <= nxt;
    end
  end
endmodule
