// traffic_manager: the queue between the ingress and egress pipelines.
//
// Two FIFOs: one for events leaving ingress, one for pseudo-segments
// mirrored back from the end of egress (ACKs and OOO merges). Each clock the
// egress pipeline receives at most one event, taken from the mirror queue
// first, so pseudo-segments are applied with the shortest delay. Events that
// find their queue full are dropped and counted; for TCP this is the same as
// a loss in the network, which retransmission repairs, and a dropped merge
// pseudo-segment is re-issued by the next segment that finds the gap closed.
// Events already marked dropped by ingress are not queued.
//
// Timing: the egress event is registered, one clock after the pop. The
// buffering, mirroring path and drop semantics follow the published design;
// the two-queue structure, strict mirror priority and depths are this
// implementation's (the real traffic manager is a fixed-function part).
module traffic_manager
  import laminar_pkg::*;
#(
  parameter int unsigned DEPTH     = 256,
  parameter int unsigned MIR_DEPTH = 64
)(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ing_valid,
  input  phv_t        ing,
  input  logic        mir_valid,
  input  phv_t        mir,
  output logic        out_valid,
  output phv_t        out,
  output logic [31:0] ing_drops,
  output logic [31:0] mir_drops
);
  phv_t ing_head, mir_head;
  logic ing_empty, ing_full, mir_empty, mir_full;
  logic ing_push, mir_push, ing_pop, mir_pop;

  assign ing_push = ing_valid && !ing.drop;
  assign mir_push = mir_valid;
  assign mir_pop  = !mir_empty;
  assign ing_pop  = mir_empty && !ing_empty;

  phv_fifo #(.DEPTH(DEPTH)) u_ing (
    .clk, .rst_n, .push(ing_push), .din(ing), .pop(ing_pop),
    .dout(ing_head), .empty(ing_empty), .full(ing_full));

  phv_fifo #(.DEPTH(MIR_DEPTH)) u_mir (
    .clk, .rst_n, .push(mir_push), .din(mir), .pop(mir_pop),
    .dout(mir_head), .empty(mir_empty), .full(mir_full));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
      ing_drops <= '0;
      mir_drops <= '0;
    end else begin
      out_valid <= mir_pop || ing_pop;
      out       <= mir_pop ? mir_head : ing_head;
      if (ing_push && ing_full) ing_drops <= ing_drops + 1;
      if (mir_push && mir_full) mir_drops <= mir_drops + 1;
    end
  end
endmodule
