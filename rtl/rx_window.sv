// rx_window: egress block 5, receive-window tracking with one out-of-order
// interval (OOO-1), the configuration the design is evaluated in.
//
// Four stateful stages in a row, each owning one per-connection variable:
//   next-seq  -> avail -> ooo-tail -> ooo-head
// next-seq is advanced optimistically for in-order data before avail, two
// stages later, checks the window (a forward read dependency resolved by
// speculation plus a control-plane exception on overrun). When the last stage
// sees that an in-order segment closed the gap to the island, it cannot
// write back to the first two stages; it flags gap_closed/merge_len and the
// pipeline mirrors a pseudo-segment that later passes these stages as a
// plain in-order segment (a circular write dependency resolved without
// stalls). Host SYNCs replenish avail.
//
// Interface: PHV in/out, control-plane write bus, exception out. Timing:
// four clocks of latency, one event per clock. See the stage modules for the
// rules of each state variable.
module rx_window
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
  output phv_t   out,
  output exc_t   exc
);
  logic v1, v2, v3;
  phv_t p1, p2, p3;

  rxw_next_seq #(.NUM_CONNS(NUM_CONNS)) u_nxt (
    .clk, .rst_n, .cp_wr, .in_valid, .in, .out_valid(v1), .out(p1));
  rxw_avail    #(.NUM_CONNS(NUM_CONNS)) u_avl (
    .clk, .rst_n, .cp_wr, .in_valid(v1), .in(p1), .out_valid(v2), .out(p2), .exc);
  rxw_ooo_tail #(.NUM_CONNS(NUM_CONNS)) u_tail (
    .clk, .rst_n, .cp_wr, .in_valid(v2), .in(p2), .out_valid(v3), .out(p3));
  rxw_ooo_head #(.NUM_CONNS(NUM_CONNS)) u_head (
    .clk, .rst_n, .cp_wr, .in_valid(v3), .in(p3), .out_valid, .out);
endmodule
