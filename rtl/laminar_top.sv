// laminar_top: the match-action TCP data path for established connections.
//
// Events enter one per clock from the network MAC (TCP segments), the host
// DMA interface (payload to send, receive-buffer replenishment) and the
// packet generator (credit triggers); an external arbiter presents them on
// ev_valid/ev. They run through
//   ingress:  classifier -> mux_demux -> scheduler -> header_transform
//   traffic manager (queue; mirrored pseudo-segments re-enter here)
//   egress:   rx_window (4 stages) -> tx_window -> data_placement
//             -> proto_signal -> rate_control -> app_notif
// Ingress only reads tables; all per-connection protocol state is in the
// egress stages, so an event the traffic manager drops is just a lost
// packet to TCP. proto_signal mirrors ACK / merge pseudo-segments back into
// the traffic manager; they run through egress again and leave as ACKs.
// Each egress output (out_valid/out) is a TCP segment for the MAC or a DMA
// write with notification for a host context.
//
// Control plane: cp_wr writes any table or state word (connection setup,
// rates, state restoration after a window-overrun exception on exc); met_idx
// selects the congestion metrics shown on met.
//
// Timing: 4 ingress clocks, 1 traffic-manager clock when the queue is empty,
// 9 egress clocks (rx_window takes 4); an event entering on clock t leaves
// on clock t+14 at the earliest, a generated ACK 10 clocks later still.
// The block order and the mirror loop are those of the published design;
// one clock per block is this implementation's choice.
module laminar_top
  import laminar_pkg::*;
#(
  parameter int unsigned NUM_CONNS     = 32768,
  parameter int unsigned TM_DEPTH      = 256,
  parameter int unsigned TM_MIR_DEPTH  = 64,
  parameter int unsigned DUPACK_THRESH = 3,
  parameter int unsigned RTO_SYNCS     = 8
)(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ev_valid,
  input  ev_in_t      ev,
  input  cp_wr_t      cp_wr,
  input  conn_t       met_idx,
  output metrics_t    met,
  output logic        out_valid,
  output egress_out_t out,
  output exc_t        exc,
  output logic [31:0] tm_ing_drops,
  output logic [31:0] tm_mir_drops
);
  logic v_cls, v_mux, v_sch, v_hdr, v_tm, v_rxw, v_txw, v_plc, v_sig, v_rate, v_mir;
  phv_t p_cls, p_mux, p_sch, p_hdr, p_tm, p_rxw, p_txw, p_plc, p_sig, p_rate, p_mir;

  // ingress
  classifier u_cls (
    .clk, .rst_n, .in_valid(ev_valid), .in(ev), .out_valid(v_cls), .out(p_cls));
  mux_demux #(.NUM_CONNS(NUM_CONNS)) u_mux (
    .clk, .rst_n, .cp_wr, .in_valid(v_cls), .in(p_cls), .out_valid(v_mux), .out(p_mux));
  scheduler #(.NUM_CONNS(NUM_CONNS)) u_sch (
    .clk, .rst_n, .cp_wr, .in_valid(v_mux), .in(p_mux), .out_valid(v_sch), .out(p_sch));
  header_transform #(.NUM_CONNS(NUM_CONNS)) u_hdr (
    .clk, .rst_n, .cp_wr, .in_valid(v_sch), .in(p_sch), .out_valid(v_hdr), .out(p_hdr));

  // traffic manager with the mirror path
  traffic_manager #(.DEPTH(TM_DEPTH), .MIR_DEPTH(TM_MIR_DEPTH)) u_tm (
    .clk, .rst_n, .ing_valid(v_hdr), .ing(p_hdr), .mir_valid(v_mir), .mir(p_mir),
    .out_valid(v_tm), .out(p_tm), .ing_drops(tm_ing_drops), .mir_drops(tm_mir_drops));

  // egress
  rx_window #(.NUM_CONNS(NUM_CONNS)) u_rxw (
    .clk, .rst_n, .cp_wr, .in_valid(v_tm), .in(p_tm), .out_valid(v_rxw), .out(p_rxw), .exc);
  tx_window #(.NUM_CONNS(NUM_CONNS), .DUPACK_THRESH(DUPACK_THRESH), .RTO_SYNCS(RTO_SYNCS)) u_txw (
    .clk, .rst_n, .cp_wr, .in_valid(v_rxw), .in(p_rxw), .out_valid(v_txw), .out(p_txw));
  data_placement #(.NUM_CONNS(NUM_CONNS)) u_plc (
    .clk, .rst_n, .cp_wr, .in_valid(v_txw), .in(p_txw), .out_valid(v_plc), .out(p_plc));
  proto_signal #(.NUM_CONNS(NUM_CONNS)) u_sig (
    .clk, .rst_n, .cp_wr, .in_valid(v_plc), .in(p_plc), .out_valid(v_sig), .out(p_sig),
    .mir_valid(v_mir), .mir(p_mir), .met_idx, .met);
  rate_control #(.NUM_CONNS(NUM_CONNS)) u_rate (
    .clk, .rst_n, .cp_wr, .in_valid(v_sig), .in(p_sig), .out_valid(v_rate), .out(p_rate));
  app_notif u_ntf (
    .clk, .rst_n, .in_valid(v_rate), .in(p_rate), .out_valid, .out);
endmodule
